// medha_top: the accelerator core — NUM_RPAU residue polynomial
// arithmetic units on a broadcast ring, driven by a program execution
// unit with two program controllers. Each RPAU processes one RNS
// residue (one 60-bit modulus) of every polynomial, so a ciphertext with
// up to NUM_RPAU residues is processed with all residues in parallel.
// RPAU 0 reduces with the sparse prime q0 = 2^59+2^25+2^22-2^20+1.
// Host interface (plain signals, all synchronous to clk):
//   imem_*      write instruction words (instr_t, INSTR_W bits) into
//               program controller imem_sel before start
//   start/done  run both programs; done is high while no program runs;
//               cycle_count counts the cycles of the last run
//   cfg_*       write a configuration word into RPAU cfg_rpau (see rpau)
//   host_*      polynomial load/unload of RPAU host_rpau, CORES words
//               per cycle (word c goes to bank c), read data one cycle
//               later; allowed only while the RPAUs are idle
//   m_busy/d_busy  per-RPAU group activity, for monitoring
// The published accelerator wraps this core in a PCIe/DMA communication
// platform with a soft processor; that part is vendor IP and not
// modelled. The RPAU count, ring and dual controllers follow the paper.
module medha_top
  import medha_pkg::*;
#(
  parameter int unsigned W          = W_DEF,
  parameter int unsigned N          = N_DEF,
  parameter int unsigned CORES      = CORES_DEF,
  parameter int unsigned DYD        = DYD_DEF,
  parameter int unsigned NUM_RPAU   = NUM_RPAU_DEF,
  parameter int unsigned LAT        = MUL_LAT_DEF,
  parameter int unsigned IMEM_DEPTH = 1024,
  localparam int unsigned AW        = $clog2(IMEM_DEPTH),
  localparam int unsigned BD        = N / CORES,
  localparam int unsigned LBD       = $clog2(BD),
  localparam int unsigned ID_W      = 4
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 imem_we,
  input  logic                 imem_sel,
  input  logic [AW-1:0]        imem_addr,
  input  logic [INSTR_W-1:0]   imem_wdata,
  input  logic                 start,
  output logic                 done,
  output logic [31:0]          cycle_count,
  output logic [31:0]          stall_count0,
  output logic [31:0]          stall_count1,
  output logic [31:0]          syncc_count,
  input  logic                 cfg_we,
  input  logic [ID_W-1:0]      cfg_rpau,
  input  logic [2:0]           cfg_sel,
  input  logic [15:0]          cfg_addr,
  input  logic [63:0]          cfg_data,
  input  logic                 host_en,
  input  logic [ID_W-1:0]      host_rpau,
  input  logic                 host_we,
  input  logic [POLY_W-1:0]    host_poly,
  input  logic [LBD-1:0]       host_addr,
  input  logic [CORES*W-1:0]   host_wdata,
  output logic [CORES*W-1:0]   host_rdata,
  output logic [NUM_RPAU-1:0]  m_busy,
  output logic [NUM_RPAU-1:0]  d_busy
);
  logic   mb [NUM_RPAU], db [NUM_RPAU];
  logic   mv [NUM_RPAU], dv [NUM_RPAU];
  instr_t mi [NUM_RPAU], di [NUM_RPAU];
  logic [31:0] stalls [2];

  program_exec_unit #(.NUM_RPAU(NUM_RPAU), .IMEM_DEPTH(IMEM_DEPTH)) u_peu (
    .clk, .rst, .imem_we, .imem_sel, .imem_addr, .imem_wdata(instr_t'(imem_wdata)),
    .start, .done, .cycle_count, .stall_count(stalls), .syncc_count,
    .m_busy(mb), .d_busy(db), .m_valid(mv), .m_instr(mi), .d_valid(dv), .d_instr(di));
  assign stall_count0 = stalls[0];
  assign stall_count1 = stalls[1];

  // ring wiring
  logic            rv [NUM_RPAU];
  logic [ID_W-1:0] ro [NUM_RPAU];
  logic [W-1:0]    rd [NUM_RPAU][CORES][2];

  logic [W-1:0] hw [CORES];
  logic [W-1:0] hr [NUM_RPAU][CORES];
  always_comb for (int c = 0; c < int'(CORES); c++) hw[c] = host_wdata[c*W +: W];

  for (genvar r = 0; r < int'(NUM_RPAU); r++) begin : g_rpau
    localparam int PREV = (r + int'(NUM_RPAU) - 1) % int'(NUM_RPAU);
    rpau #(.W(W), .N(N), .CORES(CORES), .DYD(DYD), .LAT(LAT),
           .SPARSE_Q0(r == 0), .ID_W(ID_W)) u_rpau (
      .clk, .rst, .my_id(ID_W'(r)),
      .m_instr_valid(mv[r]), .m_instr(mi[r]), .m_busy(mb[r]),
      .d_instr_valid(dv[r]), .d_instr(di[r]), .d_busy(db[r]),
      .cfg_we(cfg_we && cfg_rpau == ID_W'(r)), .cfg_sel(cfg_sel_e'(cfg_sel)),
      .cfg_addr, .cfg_data,
      .host_en(host_en && host_rpau == ID_W'(r)), .host_we, .host_poly, .host_addr,
      .host_wdata(hw), .host_rdata(hr[r]),
      .prev_valid(rv[PREV]), .prev_origin(ro[PREV]), .prev_data(rd[PREV]),
      .next_valid(rv[r]), .next_origin(ro[r]), .next_data(rd[r]));
    assign m_busy[r] = mb[r];
    assign d_busy[r] = db[r];
  end

  logic [ID_W-1:0] host_rpau_q;
  always_ff @(posedge clk) begin
    if (rst) host_rpau_q <= '0;
    else     host_rpau_q <= host_rpau;
  end
  always_comb
    for (int c = 0; c < int'(CORES); c++) host_rdata[c*W +: W] = hr[host_rpau_q][c];

  a_host_idle: assert property (@(posedge clk) disable iff (rst) host_en |-> done);
endmodule
