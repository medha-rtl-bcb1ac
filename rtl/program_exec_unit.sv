// program_exec_unit: the microcode issue logic. It owns the two program
// controllers and distributes their instructions to the RPAUs.
// An instruction's mask selects the RPAUs that execute it. Issue rules
// (checked every cycle for the current instruction of each controller):
//   main-group op   all masked RPAUs have an idle main group
//   dyadic-group op all masked RPAUs have an idle dyadic group
//   OP_SYNC         all masked RPAUs are idle in both groups
//   OP_SYNCC        the other controller also waits at OP_SYNCC (both
//                   pass together) or has stopped
//   OP_NOP, OP_END  always
// When both controllers want the same group of the same RPAU in one
// cycle, controller 0 wins and controller 1 stalls. RPAU r receives
// controller 0's instruction when controller 0 issues it with mask bit r
// set, else controller 1's. A cycle counter runs while any controller is
// running (the execution time reported to the host).
// The two concurrent instruction streams and the all-RPAU SIMD issue
// follow the published design; the exact issue rules are this design's.
module program_exec_unit
  import medha_pkg::*;
#(
  parameter int unsigned NUM_RPAU   = 10,
  parameter int unsigned IMEM_DEPTH = 1024,
  localparam int unsigned AW        = $clog2(IMEM_DEPTH)
) (
  input  logic          clk,
  input  logic          rst,
  // host
  input  logic          imem_we,
  input  logic          imem_sel,          // controller 0 or 1
  input  logic [AW-1:0] imem_addr,
  input  instr_t        imem_wdata,
  input  logic          start,
  output logic          done,
  output logic [31:0]   cycle_count,
  output logic [31:0]   stall_count [2],
  output logic [31:0]   syncc_count,
  // RPAUs
  input  logic          m_busy [NUM_RPAU],
  input  logic          d_busy [NUM_RPAU],
  output logic          m_valid [NUM_RPAU],
  output instr_t        m_instr [NUM_RPAU],
  output logic          d_valid [NUM_RPAU],
  output instr_t        d_instr [NUM_RPAU]
);
  logic   running [2];
  instr_t cur     [2];
  logic   adv     [2];
  logic   ok      [2];
  logic [31:0] issue_unused [2];

  for (genvar i = 0; i < 2; i++) begin : g_ctrl
    program_controller #(.DEPTH(IMEM_DEPTH)) u_pc (
      .clk, .rst, .imem_we(imem_we && imem_sel == 1'(i)), .imem_addr, .imem_wdata,
      .start, .running(running[i]), .cur(cur[i]), .advance(adv[i]),
      .stall_cnt(stall_count[i]), .issue_cnt(issue_unused[i]));
  end

  logic [MASK_W-1:0] msk [2];
  assign msk[0] = cur[0].mask;
  assign msk[1] = cur[1].mask;

  // readiness of each controller ignoring the other one
  always_comb begin
    for (int i = 0; i < 2; i++) begin
      ok[i] = running[i];
      for (int r = 0; r < int'(NUM_RPAU); r++) begin
        if (msk[i][r]) begin
          if (is_main_op(cur[i].op) && m_busy[r]) ok[i] = 1'b0;
          if (is_dyd_op(cur[i].op)  && d_busy[r]) ok[i] = 1'b0;
          if (cur[i].op == OP_SYNC && (m_busy[r] || d_busy[r])) ok[i] = 1'b0;
        end
      end
    end
    // SYNCC: rendezvous
    for (int i = 0; i < 2; i++)
      if (cur[i].op == OP_SYNCC &&
          !(!running[1-i] || (cur[1-i].op == OP_SYNCC)))
        ok[i] = 1'b0;
  end

  // controller 1 yields on a shared (group, RPAU)
  logic clash;
  always_comb begin
    clash = 1'b0;
    for (int r = 0; r < int'(NUM_RPAU); r++)
      if (msk[0][r] && msk[1][r] &&
          ((is_main_op(cur[0].op) && is_main_op(cur[1].op)) ||
           (is_dyd_op(cur[0].op) && is_dyd_op(cur[1].op))))
        clash = 1'b1;
    adv[0] = ok[0];
    adv[1] = ok[1] && !(ok[0] && clash);
  end

  always_comb begin
    for (int r = 0; r < int'(NUM_RPAU); r++) begin
      logic m0, m1, d0, d1;
      m0 = adv[0] && is_main_op(cur[0].op) && msk[0][r];
      m1 = adv[1] && is_main_op(cur[1].op) && msk[1][r];
      d0 = adv[0] && is_dyd_op(cur[0].op)  && msk[0][r];
      d1 = adv[1] && is_dyd_op(cur[1].op)  && msk[1][r];
      m_valid[r] = m0 || m1;
      m_instr[r] = m0 ? cur[0] : cur[1];
      d_valid[r] = d0 || d1;
      d_instr[r] = d0 ? cur[0] : cur[1];
    end
  end

  assign done = !running[0] && !running[1];

  always_ff @(posedge clk) begin
    if (rst) begin
      cycle_count <= '0; syncc_count <= '0;
    end else if (start) begin
      cycle_count <= '0; syncc_count <= '0;
    end else begin
      if (running[0] || running[1]) cycle_count <= cycle_count + 1'b1;
      if (adv[0] && cur[0].op == OP_SYNCC) syncc_count <= syncc_count + 1'b1;
    end
  end

  // never two instructions for the same group of one RPAU
  logic dup;
  always_comb begin
    dup = 1'b0;
    for (int r = 0; r < int'(NUM_RPAU); r++)
      if (adv[0] && adv[1] && msk[0][r] && msk[1][r] &&
          ((is_main_op(cur[0].op) && is_main_op(cur[1].op)) ||
           (is_dyd_op(cur[0].op) && is_dyd_op(cur[1].op))))
        dup = 1'b1;
  end
  a_no_double_issue: assert property (@(posedge clk) disable iff (rst) !dup);
endmodule
