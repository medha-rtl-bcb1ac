// tb_program_exec_unit: the issue logic against behavioural RPAU models
// (4 RPAUs whose groups stay busy for a random time after each
// instruction). Two programs are run; the testbench checks that no
// instruction reaches a busy group, that every instruction reaches
// exactly the RPAUs of its mask, in program order per controller, that
// SYNC waits for idle groups, that SYNCC makes both controllers pass
// together, that a clash on the same group lets controller 0 go first
// (controller 1 stalls), and that the cycle counter runs while a program
// runs.
module tb_program_exec_unit;
  import medha_pkg::*;
  localparam int NR = 4;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic imem_we = 0, imem_sel = 0, start = 0, done;
  logic [9:0] imem_addr = 0;
  instr_t imem_wdata;
  logic [31:0] cycle_count, syncc_count;
  logic [31:0] stall_count [2];
  logic m_busy [NR], d_busy [NR], m_valid [NR], d_valid [NR];
  instr_t m_instr [NR], d_instr [NR];
  int checks = 0, failures = 0;
  program_exec_unit #(.NUM_RPAU(NR), .IMEM_DEPTH(1024)) dut (.*);

  int mleft [NR], dleft [NR];
  int got_m [NR][$], got_d [NR][$];
  int bad_busy = 0, cyc = 0, sync_bad = 0, syncc_pass_t [2];
  always_comb for (int r = 0; r < NR; r++) begin m_busy[r] = mleft[r] > 0; d_busy[r] = dleft[r] > 0; end
  always @(posedge clk) if (!rst) begin
    cyc++;
    for (int r = 0; r < NR; r++) begin
      if (m_valid[r]) begin
        if (m_busy[r]) bad_busy++;
        got_m[r].push_back(int'(m_instr[r].dst));
        mleft[r] <= 1 + $urandom % 12;
      end else if (mleft[r] > 0) mleft[r] <= mleft[r] - 1;
      if (d_valid[r]) begin
        if (d_busy[r]) bad_busy++;
        got_d[r].push_back(int'(d_instr[r].dst));
        dleft[r] <= 1 + $urandom % 12;
      end else if (dleft[r] > 0) dleft[r] <= dleft[r] - 1;
    end
    for (int i = 0; i < 2; i++)
      if (dut.adv[i] && dut.cur[i].op == OP_SYNC)
        for (int r = 0; r < NR; r++) if (dut.cur[i].mask[r] && (m_busy[r] || d_busy[r])) sync_bad++;
    for (int i = 0; i < 2; i++) if (dut.adv[i] && dut.cur[i].op == OP_SYNCC) syncc_pass_t[i] = cyc;
  end

  function automatic instr_t mk(opcode_e op, int mask, int dst);
    instr_t x; x = '0; x.op = op; x.mask = 16'(mask); x.dst = POLY_W'(dst); return x;
  endfunction

  initial begin
    #2ms; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  initial begin
    instr_t p [2][$];
    int exp_m [NR][$], exp_d [NR][$];
    for (int r = 0; r < NR; r++) begin mleft[r] = 0; dleft[r] = 0; end
    imem_wdata = '0;
    // controller 0: main ops, one clash with controller 1, SYNC, SYNCC
    p[0] = '{mk(OP_NTT, 4'b1111, 1), mk(OP_CADD, 4'b0011, 2), mk(OP_DMUL, 4'b0001, 3),
             mk(OP_SYNC, 4'b1111, 0), mk(OP_SYNCC, 0, 0), mk(OP_AUTO, 4'b1000, 4), mk(OP_END, 0, 0)};
    // controller 1: dyadic ops, SYNCC, one main op
    p[1] = '{mk(OP_DADD, 4'b1111, 11), mk(OP_DMAC, 4'b0001, 12), mk(OP_NOP, 0, 0),
             mk(OP_SYNCC, 0, 0), mk(OP_CSUB, 4'b0100, 13), mk(OP_END, 0, 0)};
    repeat (2) @(negedge clk); rst = 0;
    for (int i = 0; i < 2; i++)
      foreach (p[i][k]) begin
        imem_we = 1; imem_sel = i[0]; imem_addr = 10'(k); imem_wdata = p[i][k]; @(negedge clk);
      end
    imem_we = 0;
    start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    // expected per-RPAU sequences (per group, in order; the two
    // controllers' instructions to one group keep their program order
    // within each controller)
    for (int r = 0; r < NR; r++) begin
      int mo [$], dd [$];
      mo = {}; dd = {};
      foreach (got_m[r][k]) mo.push_back(got_m[r][k]);
      foreach (got_d[r][k]) dd.push_back(got_d[r][k]);
      for (int i = 0; i < 2; i++)
        foreach (p[i][k])
          if (p[i][k].mask[r]) begin
            if (is_main_op(p[i][k].op)) exp_m[r].push_back(int'(p[i][k].dst));
            if (is_dyd_op(p[i][k].op))  exp_d[r].push_back(int'(p[i][k].dst));
          end
      mo.sort(); dd.sort(); exp_m[r].sort(); exp_d[r].sort();
      checks += 2;
      if (mo != exp_m[r]) begin failures++; $display("FAIL main instrs RPAU%0d got %p exp %p", r, mo, exp_m[r]); end
      if (dd != exp_d[r]) begin failures++; $display("FAIL dyadic instrs RPAU%0d", r); end
    end
    checks += 6;
    if (bad_busy != 0) begin failures++; $display("FAIL issued to busy group"); end
    if (sync_bad != 0) begin failures++; $display("FAIL SYNC passed while busy"); end
    if (syncc_pass_t[0] != syncc_pass_t[1]) begin failures++; $display("FAIL SYNCC not together"); end
    if (syncc_count != 1) failures++;
    if (stall_count[0] == 0 || stall_count[1] == 0) failures++;
    if (cycle_count < 10 || cycle_count > 32'(cyc)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
