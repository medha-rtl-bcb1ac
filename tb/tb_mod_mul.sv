// tb_mod_mul: streams random operands into the pipelined modular
// multiplier (one per cycle, with gaps) for a Barrett instance (60-bit
// prime) and a sparse-q0 instance, and checks every result and that it
// appears exactly LAT = 20 cycles after its operands.
module tb_mod_mul;
  import tb_math_pkg::*;
  localparam int LAT = 20;
  localparam u64 Q1 = 64'h0ffffffffffc0001;
  localparam u64 Q0 = 64'h0800000002300001;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic        iv = 0;
  logic [59:0] a = 0, b = 0, q1, q0;
  logic [67:0] mu1, mu0;
  logic        ov1, ov0;
  logic [59:0] p1, p0;
  int checks = 0, failures = 0;
  mod_mul #(.W(60), .LAT(LAT))                  d1 (.clk, .rst, .in_valid(iv), .a, .b, .q(q1), .mu(mu1), .out_valid(ov1), .p(p1));
  mod_mul #(.W(60), .LAT(LAT), .SPARSE_Q0(1'b1)) d0 (.clk, .rst, .in_valid(iv), .a, .b, .q(q0), .mu(mu0), .out_valid(ov0), .p(p0));
  u64 ea1 [$], ea0 [$];
  int t_in [$];
  int cyc = 0;
  always @(posedge clk) cyc++;
  initial begin
    #1ms; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  // checker
  always @(negedge clk) if (!rst) begin
    if (ov1 !== ov0) begin checks++; failures++; end
    if (ov1) begin
      u64 e1, e0; int ti;
      e1 = ea1.pop_front(); e0 = ea0.pop_front(); ti = t_in.pop_front();
      checks += 3;
      if (u64'(p1) != e1) failures++;
      if (u64'(p0) != e0) failures++;
      if (cyc - ti != LAT) begin failures++; $display("FAIL latency %0d", cyc - ti); end
    end
  end
  initial begin
    q1 = 60'(Q1); q0 = 60'(Q0); mu1 = barrett_mu(Q1); mu0 = barrett_mu(Q0);
    repeat (2) @(negedge clk); rst = 0;
    for (int i = 0; i < 1500; i++) begin
      u64 x, y, z;
      @(negedge clk);
      iv = ($urandom % 4) != 0;
      x = {$urandom, $urandom} % Q0; y = {$urandom, $urandom} % Q0; z = {$urandom, $urandom} % Q1;
      if (i == 5) begin x = Q0 - 1; y = Q0 - 1; z = Q1 - 1; end
      a = 60'(x); b = 60'(y);
      if (iv) begin
        // the Barrett instance sees a and b, which are below both moduli
        ea1.push_back(mulm(x, y, Q1)); ea0.push_back(mulm(x, y, Q0)); t_in.push_back(cyc);
      end
    end
    @(negedge clk); iv = 0;
    repeat (LAT + 3) @(negedge clk);
    checks++; if (ea1.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
