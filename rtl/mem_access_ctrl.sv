// mem_access_ctrl: arbitration in front of the main-core ports of
// rpau_memory. Two masters share them:
//   - the host (external loading/unloading of polynomials) — when
//     host_en is high, port 0 of every bank serves the host: one word per
//     bank per cycle at the same local address (host_we: write
//     host_wdata[c] into bank c, otherwise read; host_rdata is valid one
//     cycle after a read), and the main-core requests are blocked;
//   - the RPAU main core, in all other cycles (a plain pass-through).
// It also checks, per bank, that no two write ports (two main-core ports
// and the dyadic lane writing that bank) hit the same word in one cycle.
// The published design reaches the RPMs from the host through its
// communication platform; this arbitration point and the host word
// format are this design's choices. The program controller never starts
// an RPAU instruction while host_en is set (an assertion checks that the
// core is idle).
module mem_access_ctrl
  import medha_pkg::*;
#(
  parameter int unsigned W     = 60,
  parameter int unsigned N     = 16384,
  parameter int unsigned CORES = 16,
  parameter int unsigned DYD   = 4,
  localparam int unsigned BD   = N / CORES,
  localparam int unsigned LBD  = $clog2(BD),
  localparam int unsigned LOGN = $clog2(N)
) (
  input  logic              clk,
  input  logic              rst,
  // host
  input  logic              host_en,
  input  logic              host_we,
  input  logic [POLY_W-1:0] host_poly,
  input  logic [LBD-1:0]    host_addr,
  input  logic [W-1:0]      host_wdata [CORES],
  output logic [W-1:0]      host_rdata [CORES],
  input  logic              core_busy,
  // main core side
  input  logic              c_rd_en   [CORES][2],
  input  logic [POLY_W-1:0] c_rd_poly [CORES][2],
  input  logic [LBD-1:0]    c_rd_addr [CORES][2],
  output logic [W-1:0]      c_rd_data [CORES][2],
  input  logic              c_wr_en   [CORES][2],
  input  logic [POLY_W-1:0] c_wr_poly [CORES][2],
  input  logic [LBD-1:0]    c_wr_addr [CORES][2],
  input  logic [W-1:0]      c_wr_data [CORES][2],
  // dyadic writes (observed for the conflict check)
  input  logic              d_wr_en   [DYD],
  input  logic [POLY_W-1:0] d_wr_poly [DYD],
  input  logic [LOGN-1:0]   d_wr_n    [DYD],
  // memory side
  output logic              m_rd_en   [CORES][2],
  output logic [POLY_W-1:0] m_rd_poly [CORES][2],
  output logic [LBD-1:0]    m_rd_addr [CORES][2],
  input  logic [W-1:0]      m_rd_data [CORES][2],
  output logic              m_wr_en   [CORES][2],
  output logic [POLY_W-1:0] m_wr_poly [CORES][2],
  output logic [LBD-1:0]    m_wr_addr [CORES][2],
  output logic [W-1:0]      m_wr_data [CORES][2]
);
  always_comb begin
    for (int c = 0; c < int'(CORES); c++) begin
      for (int p = 0; p < 2; p++) begin
        m_rd_en[c][p]   = host_en ? (p == 0 && !host_we) : c_rd_en[c][p];
        m_rd_poly[c][p] = host_en ? host_poly : c_rd_poly[c][p];
        m_rd_addr[c][p] = host_en ? host_addr : c_rd_addr[c][p];
        m_wr_en[c][p]   = host_en ? (p == 0 && host_we) : c_wr_en[c][p];
        m_wr_poly[c][p] = host_en ? host_poly : c_wr_poly[c][p];
        m_wr_addr[c][p] = host_en ? host_addr : c_wr_addr[c][p];
        m_wr_data[c][p] = host_en ? host_wdata[c] : c_wr_data[c][p];
        c_rd_data[c][p] = m_rd_data[c][p];
      end
      host_rdata[c] = m_rd_data[c][0];
    end
  end

  // write-write conflict detection per bank
  logic conflict;
  always_comb begin
    conflict = 1'b0;
    for (int c = 0; c < int'(CORES); c++) begin
      if (m_wr_en[c][0] && m_wr_en[c][1] && m_wr_poly[c][0] == m_wr_poly[c][1] &&
          m_wr_addr[c][0] == m_wr_addr[c][1])
        conflict = 1'b1;
      for (int l = 0; l < int'(DYD); l++)
        for (int p = 0; p < 2; p++)
          if (d_wr_en[l] && m_wr_en[c][p] && int'(32'(d_wr_n[l]) >> LBD) == c &&
              d_wr_poly[l] == m_wr_poly[c][p] && LBD'(d_wr_n[l]) == m_wr_addr[c][p])
            conflict = 1'b1;
    end
  end
  a_no_write_conflict: assert property (@(posedge clk) disable iff (rst) !conflict);
  a_host_when_idle:    assert property (@(posedge clk) disable iff (rst) host_en |-> !core_busy);
endmodule
