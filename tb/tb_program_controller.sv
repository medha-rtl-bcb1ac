// tb_program_controller: loads a short program, starts it and grants
// issue on a random pattern; checks that instructions come out in
// program order, that the program counter only moves on advance, that
// stall and issue counters match the grant pattern, and that OP_END
// stops the stream. A restart replays the program from address 0.
module tb_program_controller;
  import medha_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic imem_we = 0, start = 0, running, advance = 0;
  logic [9:0] imem_addr = 0;
  instr_t imem_wdata, cur;
  logic [31:0] stall_cnt, issue_cnt;
  int checks = 0, failures = 0;
  program_controller #(.DEPTH(1024)) dut (.*);
  initial begin
    #1ms; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  initial begin
    instr_t prog [12];
    imem_wdata = '0;
    for (int i = 0; i < 12; i++) begin
      prog[i] = '0;
      prog[i].op = (i == 11) ? OP_END : OP_CADD;
      prog[i].dst = POLY_W'(i);
    end
    repeat (2) @(negedge clk); rst = 0;
    foreach (prog[i]) begin imem_we = 1; imem_addr = 10'(i); imem_wdata = prog[i]; @(negedge clk); end
    imem_we = 0;
    for (int run = 0; run < 2; run++) begin
      int idx, stalls, issues;
      idx = 0; stalls = 0; issues = 0;
      start = 1; @(negedge clk); start = 0;
      while (running) begin
        advance = ($urandom % 3) != 0;
        #1;
        checks++; if (cur !== prog[idx]) begin failures++; $display("FAIL order at %0d", idx); end
        if (advance) begin idx++; issues++; end else stalls++;
        @(negedge clk);
      end
      advance = 0;
      checks += 3;
      if (idx != 12) failures++;
      if (stall_cnt != 32'(stalls)) failures++;
      if (issue_cnt != 32'(issues)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
