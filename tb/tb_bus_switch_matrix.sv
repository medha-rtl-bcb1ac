// tb_bus_switch_matrix: random conflict-free request patterns (each of
// 32 requesters picks a distinct (bank, port)); checks that every
// (bank, port) output carries the right payload, idle ports are invalid,
// and read data returns to the requester one cycle later.
module tb_bus_switch_matrix;
  localparam int NREQ = 32, NB = 16;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic        rv [NREQ];
  logic [3:0]  rb [NREQ];
  logic        rp [NREQ];
  logic [15:0] pay [NREQ];
  logic        bv [NB][2];
  logic [15:0] bp [NB][2];
  logic [59:0] bd [NB][2];
  logic [59:0] rd [NREQ];
  int checks = 0, failures = 0;
  bus_switch_matrix #(.NREQ(NREQ), .NBANK(NB), .PW(16), .DW(60)) dut (
    .clk, .rst, .req_valid(rv), .req_bank(rb), .req_port(rp), .req_payload(pay),
    .bank_valid(bv), .bank_payload(bp), .bank_rdata(bd), .req_rdata(rd));
  initial begin
    #1ms; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  initial begin
    int perm [NREQ];
    int slot_of_req [NREQ];
    bit was_valid [NREQ];
    for (int r = 0; r < NREQ; r++) begin rv[r] = 0; rb[r] = 0; rp[r] = 0; pay[r] = 0; was_valid[r] = 0; end
    for (int b = 0; b < NB; b++) begin bd[b][0] = 0; bd[b][1] = 0; end
    repeat (2) @(negedge clk); rst = 0;
    for (int it = 0; it < 300; it++) begin
      for (int r = 0; r < NREQ; r++) perm[r] = r;
      perm.shuffle();
      for (int r = 0; r < NREQ; r++) begin
        rv[r] = ($urandom % 4) != 0;
        rb[r] = 4'(perm[r] / 2); rp[r] = perm[r][0];
        pay[r] = 16'($urandom);
      end
      #1;
      for (int b = 0; b < NB; b++)
        for (int p = 0; p < 2; p++) begin
          int who; who = -1;
          for (int r = 0; r < NREQ; r++) if (rv[r] && perm[r] == 2 * b + p) who = r;
          checks++;
          if (who < 0 ? bv[b][p] : (!bv[b][p] || bp[b][p] != pay[who])) failures++;
        end
      for (int r = 0; r < NREQ; r++) begin slot_of_req[r] = perm[r]; was_valid[r] = rv[r]; end
      @(negedge clk);
      // memory answers: data = function of (bank, port)
      for (int b = 0; b < NB; b++) for (int p = 0; p < 2; p++) bd[b][p] = 60'(1000 * it + 2 * b + p);
      #1;
      for (int r = 0; r < NREQ; r++)
        if (was_valid[r]) begin
          checks++;
          if (rd[r] != 60'(1000 * it + slot_of_req[r])) failures++;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
