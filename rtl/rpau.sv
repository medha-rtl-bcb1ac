// rpau: one residue polynomial arithmetic unit (RPAU). It owns one RNS
// residue of every polynomial: a memory of 31 polynomial slots (13 RPMs
// + 9 KSK0 + 9 KSK1) in CORES banks, a main core group (NTT/INTT,
// coefficient-wise ops, split/join, automorphism, broadcast) and a
// dyadic core group (dyadic add/sub/mult/MAC with on-the-fly KSK0).
// The two groups take instructions on separate inputs and run
// concurrently. Configuration registers (written by the host through
// cfg_*, one 64-bit word per cycle):
//   CFG_Q / CFG_MU / CFG_QBITS  modulus, Barrett constant, bit length
//   CFG_SCALAR[addr]            scalars used by CSCALE/SPLIT/JOIN
//   CFG_SEED[addr]              KSK0 seeds
//   CFG_TF   addr = {core, dir, index}  twiddle tables (per core)
//   CFG_TFSCL addr = {ring, dir, stage} ring scale factors
// The host reaches the memory through mem_access_ctrl (one word per bank
// per cycle) while the RPAU is idle. Ring traffic passes ring_node.
// The composition follows the published RPAU (main group of 16
// butterfly cores, dyadic group of 4 cores, shared RPMs); the register
// map is this design's choice. RPAU 0 may use the sparse-q0 reduction.
module rpau
  import medha_pkg::*;
#(
  parameter int unsigned W         = 60,
  parameter int unsigned N         = 16384,
  parameter int unsigned CORES     = 16,
  parameter int unsigned DYD       = 4,
  parameter int unsigned LAT       = 20,
  parameter bit          SPARSE_Q0 = 1'b0,
  parameter int unsigned ID_W      = 4,
  localparam int unsigned MU_W     = W + 8,
  localparam int unsigned BD       = N / CORES,
  localparam int unsigned LBD      = $clog2(BD),
  localparam int unsigned LOGN     = $clog2(N),
  localparam int unsigned LC       = $clog2(CORES),
  localparam int unsigned TF_DEPTH = BD + LC - 1,
  localparam int unsigned IW       = $clog2(TF_DEPTH),
  localparam int unsigned SW       = $clog2(LOGN)
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [ID_W-1:0]   my_id,
  // instructions
  input  logic              m_instr_valid,
  input  instr_t            m_instr,
  output logic              m_busy,
  input  logic              d_instr_valid,
  input  instr_t            d_instr,
  output logic              d_busy,
  // configuration
  input  logic              cfg_we,
  input  cfg_sel_e          cfg_sel,
  input  logic [15:0]       cfg_addr,
  input  logic [63:0]       cfg_data,
  // host memory access
  input  logic              host_en,
  input  logic              host_we,
  input  logic [POLY_W-1:0] host_poly,
  input  logic [LBD-1:0]    host_addr,
  input  logic [W-1:0]      host_wdata [CORES],
  output logic [W-1:0]      host_rdata [CORES],
  // ring
  input  logic              prev_valid,
  input  logic [ID_W-1:0]   prev_origin,
  input  logic [W-1:0]      prev_data [CORES][2],
  output logic              next_valid,
  output logic [ID_W-1:0]   next_origin,
  output logic [W-1:0]      next_data [CORES][2]
);
  // ---------------- configuration registers --------------------------------
  logic [W-1:0]    q;
  logic [MU_W-1:0] mu;
  logic [6:0]      qbits;
  logic [W-1:0]    scalar [NUM_SCALAR];
  logic [63:0]     seed   [NUM_SCALAR];

  always_ff @(posedge clk) begin
    if (rst) begin
      q <= '0; mu <= '0; qbits <= '0;
      for (int i = 0; i < int'(NUM_SCALAR); i++) begin scalar[i] <= '0; seed[i] <= '0; end
    end else if (cfg_we) begin
      unique case (cfg_sel)
        CFG_Q:      q     <= W'(cfg_data);
        CFG_MU:     mu    <= MU_W'(cfg_data);
        CFG_QBITS:  qbits <= 7'(cfg_data);
        CFG_SCALAR: scalar[cfg_addr[3:0]] <= W'(cfg_data);
        CFG_SEED:   seed[cfg_addr[3:0]]   <= cfg_data;
        default: ;
      endcase
    end
  end

  // ---------------- main core group --------------------------------------------
  logic              c_rd_en   [CORES][2];
  logic [POLY_W-1:0] c_rd_poly [CORES][2];
  logic [LBD-1:0]    c_rd_addr [CORES][2];
  logic [W-1:0]      c_rd_data [CORES][2];
  logic              c_wr_en   [CORES][2];
  logic [POLY_W-1:0] c_wr_poly [CORES][2];
  logic [LBD-1:0]    c_wr_addr [CORES][2];
  logic [W-1:0]      c_wr_data [CORES][2];
  logic              m_rd_en   [CORES][2];
  logic [POLY_W-1:0] m_rd_poly [CORES][2];
  logic [LBD-1:0]    m_rd_addr [CORES][2];
  logic [W-1:0]      m_rd_data [CORES][2];
  logic              m_wr_en   [CORES][2];
  logic [POLY_W-1:0] m_wr_poly [CORES][2];
  logic [LBD-1:0]    m_wr_addr [CORES][2];
  logic [W-1:0]      m_wr_data [CORES][2];
  logic              tx_valid, rx_valid;
  logic [W-1:0]      tx_data [CORES][2];
  logic [W-1:0]      rx_data [CORES][2];

  rpau_main_core #(.W(W), .N(N), .CORES(CORES), .LAT(LAT), .SPARSE_Q0(SPARSE_Q0), .ID_W(ID_W)) u_main (
    .clk, .rst, .q, .mu, .scalar, .my_id,
    .cfg_tf_we(cfg_we && cfg_sel == CFG_TF),
    .cfg_tf_core(cfg_addr[IW+1 +: LC]), .cfg_tf_dir(cfg_addr[IW]), .cfg_tf_addr(cfg_addr[IW-1:0]),
    .cfg_scl_we(cfg_we && cfg_sel == CFG_TFSCL),
    .cfg_scl_ring(cfg_addr[SW+1 +: 2]), .cfg_scl_dir(cfg_addr[SW]), .cfg_scl_stage(cfg_addr[SW-1:0]),
    .cfg_data(W'(cfg_data)),
    .instr_valid(m_instr_valid), .instr(m_instr), .busy(m_busy),
    .c_rd_en, .c_rd_poly, .c_rd_addr, .c_rd_data,
    .c_wr_en, .c_wr_poly, .c_wr_addr, .c_wr_data,
    .tx_valid, .tx_data, .rx_valid, .rx_data);

  // ---------------- dyadic core group -------------------------------------------
  logic              d_rd_en   [DYD][3];
  logic [POLY_W-1:0] d_rd_poly [DYD][3];
  logic [LOGN-1:0]   d_rd_n    [DYD][3];
  logic [W-1:0]      d_rd_data [DYD][3];
  logic              d_wr_en   [DYD];
  logic [POLY_W-1:0] d_wr_poly [DYD];
  logic [LOGN-1:0]   d_wr_n    [DYD];
  logic [W-1:0]      d_wr_data [DYD];

  rpau_dyadic #(.W(W), .N(N), .DYD(DYD), .LAT(LAT), .SPARSE_Q0(SPARSE_Q0)) u_dyd (
    .clk, .rst, .q, .mu, .seed, .qbits,
    .instr_valid(d_instr_valid), .instr(d_instr), .busy(d_busy),
    .d_rd_en, .d_rd_poly, .d_rd_n, .d_rd_data,
    .d_wr_en, .d_wr_poly, .d_wr_n, .d_wr_data);

  // ---------------- memory -----------------------------------------------------
  mem_access_ctrl #(.W(W), .N(N), .CORES(CORES), .DYD(DYD)) u_mac (
    .clk, .rst, .host_en, .host_we, .host_poly, .host_addr, .host_wdata, .host_rdata,
    .core_busy(m_busy || d_busy),
    .c_rd_en, .c_rd_poly, .c_rd_addr, .c_rd_data,
    .c_wr_en, .c_wr_poly, .c_wr_addr, .c_wr_data,
    .d_wr_en, .d_wr_poly, .d_wr_n,
    .m_rd_en, .m_rd_poly, .m_rd_addr, .m_rd_data,
    .m_wr_en, .m_wr_poly, .m_wr_addr, .m_wr_data);

  rpau_memory #(.W(W), .N(N), .CORES(CORES), .DYD(DYD)) u_mem (
    .clk,
    .m_rd_en, .m_rd_poly, .m_rd_addr, .m_rd_data,
    .m_wr_en, .m_wr_poly, .m_wr_addr, .m_wr_data,
    .d_rd_en, .d_rd_poly, .d_rd_n, .d_rd_data,
    .d_wr_en, .d_wr_poly, .d_wr_n, .d_wr_data);

  // ---------------- ring -----------------------------------------------------------
  ring_node #(.W(W), .CORES(CORES), .ID_W(ID_W)) u_ring (
    .clk, .rst, .my_id, .prev_valid, .prev_origin, .prev_data,
    .next_valid, .next_origin, .next_data,
    .tx_valid, .tx_data, .rx_valid, .rx_data);
endmodule
