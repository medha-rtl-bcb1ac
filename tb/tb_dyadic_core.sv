// tb_dyadic_core: streams random operands through the dyadic core in
// each mode (add, sub, mul, multiply-accumulate), mixing modes from cycle
// to cycle, and checks every result and its fixed latency LAT+1.
module tb_dyadic_core;
  import medha_pkg::*;
  import tb_math_pkg::*;
  localparam int W = 60, LAT = 20;
  localparam u64 Q = 64'h0fffffffff550001;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [W-1:0] q, a = 0, b = 0, c = 0, out;
  logic [W+7:0] mu;
  logic in_valid = 0, out_valid;
  dy_mode_e mode = DY_ADD;
  logic [15:0] in_tag = 0, out_tag;
  int checks = 0, failures = 0;
  dyadic_core #(.W(W), .LAT(LAT)) dut (.*);
  u64 expv [int];
  int due [int];
  int cyc = 0;
  always @(posedge clk) cyc++;
  initial begin
    #1ms; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  always @(negedge clk) if (!rst && out_valid) begin
    checks++;
    if (!expv.exists(int'(out_tag)) || u64'(out) != expv[int'(out_tag)] || due[int'(out_tag)] != cyc) begin
      failures++; if (failures < 5) $display("FAIL tag %0d", out_tag);
    end
    expv.delete(int'(out_tag));
  end
  initial begin
    q = W'(Q); mu = barrett_mu(Q);
    repeat (2) @(negedge clk); rst = 0;
    for (int i = 0; i < 1000; i++) begin
      u64 x, y, z;
      x = {$urandom, $urandom} % Q; y = {$urandom, $urandom} % Q; z = {$urandom, $urandom} % Q;
      in_valid = ($urandom % 4) != 0;
      mode = dy_mode_e'($urandom % 4);
      a = W'(x); b = W'(y); c = W'(z); in_tag = 16'(i);
      if (in_valid) begin
        unique case (mode)
          DY_ADD: expv[i] = addm(x, y, Q);
          DY_SUB: expv[i] = subm(x, y, Q);
          DY_MUL: expv[i] = mulm(x, y, Q);
          default: expv[i] = addm(z, mulm(x, y, Q), Q);
        endcase
        due[i] = cyc + LAT + 1;
      end
      @(negedge clk);
    end
    in_valid = 0;
    repeat (LAT + 4) @(negedge clk);
    checks++; if (expv.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
