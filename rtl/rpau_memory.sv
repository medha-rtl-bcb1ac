// rpau_memory: the polynomial memory of one RPAU (residue polynomial
// arithmetic unit). It holds NUM_POLY polynomials of N coefficients:
// 13 general residue polynomial slots (RPM0..12) and the key-switching
// key slots KSK0-0..8 and KSK1-0..8. Each polynomial is split over CORES
// banks; bank c stores coefficients c*BD .. c*BD+BD-1 (BD = N/CORES),
// so bank c, word poly*BD + a holds coefficient c*BD + a of poly.
// Ports (all reads have one cycle latency, writes take effect at the
// clock edge):
//   main core : per bank 2 read + 2 write ports (local address)
//   dyadic    : per lane 3 read + 1 write port (global coefficient index);
//               the lane-to-bank routing is done here, the dyadic
//               schedule keeps the lanes in different banks.
// The published design uses 16 banks (URAM/BRAM) per polynomial with
// the same 13 + 9 + 9 slot map; the port count per bank is an
// abstraction of this design (a behavioural multi-port array instead of
// the FPGA's dual-port blocks).
module rpau_memory
  import medha_pkg::*;
#(
  parameter int unsigned W     = 60,
  parameter int unsigned N     = 16384,
  parameter int unsigned CORES = 16,
  parameter int unsigned DYD   = 4,
  localparam int unsigned BD   = N / CORES,
  localparam int unsigned LBD  = $clog2(BD),
  localparam int unsigned LOGN = $clog2(N),
  localparam int unsigned LC   = $clog2(CORES),
  localparam int unsigned DEPTH = NUM_POLY * BD
) (
  input  logic              clk,
  input  logic              m_rd_en   [CORES][2],
  input  logic [POLY_W-1:0] m_rd_poly [CORES][2],
  input  logic [LBD-1:0]    m_rd_addr [CORES][2],
  output logic [W-1:0]      m_rd_data [CORES][2],
  input  logic              m_wr_en   [CORES][2],
  input  logic [POLY_W-1:0] m_wr_poly [CORES][2],
  input  logic [LBD-1:0]    m_wr_addr [CORES][2],
  input  logic [W-1:0]      m_wr_data [CORES][2],
  input  logic              d_rd_en   [DYD][3],
  input  logic [POLY_W-1:0] d_rd_poly [DYD][3],
  input  logic [LOGN-1:0]   d_rd_n    [DYD][3],
  output logic [W-1:0]      d_rd_data [DYD][3],
  input  logic              d_wr_en   [DYD],
  input  logic [POLY_W-1:0] d_wr_poly [DYD],
  input  logic [LOGN-1:0]   d_wr_n    [DYD],
  input  logic [W-1:0]      d_wr_data [DYD]
);
  typedef logic [$clog2(DEPTH)-1:0] waddr_t;

  function automatic waddr_t wa(input logic [POLY_W-1:0] poly, input logic [LBD-1:0] a);
    return waddr_t'(int'(poly) * int'(BD) + int'(a));
  endfunction

  // per bank: select the dyadic lane (if any) that addresses this bank
  logic [LC-1:0] d_rd_bank_q [DYD][3];
  logic [W-1:0]  bank_d_rd   [CORES][3];

  for (genvar c = 0; c < int'(CORES); c++) begin : g_bank
    logic [W-1:0]      mem [DEPTH];
    logic              dr_en [3];
    logic [POLY_W-1:0] dr_poly [3];
    logic [LBD-1:0]    dr_addr [3];
    logic              dw_en;
    logic [POLY_W-1:0] dw_poly;
    logic [LBD-1:0]    dw_addr;
    logic [W-1:0]      dw_data;

    always_comb begin
      for (int p = 0; p < 3; p++) begin
        dr_en[p] = 1'b0; dr_poly[p] = '0; dr_addr[p] = '0;
        for (int l = 0; l < int'(DYD); l++)
          if (d_rd_en[l][p] && LC'(d_rd_n[l][p] >> LBD) == LC'(c)) begin
            dr_en[p] = 1'b1; dr_poly[p] = d_rd_poly[l][p]; dr_addr[p] = LBD'(d_rd_n[l][p]);
          end
      end
      dw_en = 1'b0; dw_poly = '0; dw_addr = '0; dw_data = '0;
      for (int l = 0; l < int'(DYD); l++)
        if (d_wr_en[l] && LC'(d_wr_n[l] >> LBD) == LC'(c)) begin
          dw_en = 1'b1; dw_poly = d_wr_poly[l]; dw_addr = LBD'(d_wr_n[l]); dw_data = d_wr_data[l];
        end
    end

    always_ff @(posedge clk) begin
      for (int p = 0; p < 2; p++) begin
        if (m_rd_en[c][p]) m_rd_data[c][p] <= mem[wa(m_rd_poly[c][p], m_rd_addr[c][p])];
        if (m_wr_en[c][p]) mem[wa(m_wr_poly[c][p], m_wr_addr[c][p])] <= m_wr_data[c][p];
      end
      for (int p = 0; p < 3; p++)
        if (dr_en[p]) bank_d_rd[c][p] <= mem[wa(dr_poly[p], dr_addr[p])];
      if (dw_en) mem[wa(dw_poly, dw_addr)] <= dw_data;
    end
  end

  // dyadic read data back to the lanes (one cycle later)
  always_ff @(posedge clk) begin
    for (int l = 0; l < int'(DYD); l++)
      for (int p = 0; p < 3; p++)
        d_rd_bank_q[l][p] <= LC'(d_rd_n[l][p] >> LBD);
  end
  always_comb begin
    for (int l = 0; l < int'(DYD); l++)
      for (int p = 0; p < 3; p++)
        d_rd_data[l][p] = bank_d_rd[d_rd_bank_q[l][p]][p];
  end
endmodule
