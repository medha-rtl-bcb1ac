// tb_pipe_delay: checks that the delay line returns every input exactly
// DEPTH cycles later, for DEPTH = 0 (a wire) and DEPTH = 5.
module tb_pipe_delay;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [15:0] d = 0, q0, q5;
  logic [15:0] hist [$];
  int checks = 0, failures = 0;
  pipe_delay #(.WIDTH(16), .DEPTH(0)) u0 (.clk, .rst, .d, .q(q0));
  pipe_delay #(.WIDTH(16), .DEPTH(5)) u5 (.clk, .rst, .d, .q(q5));
  initial begin
    #100us; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst = 0;
    for (int i = 0; i < 200; i++) begin
      d = 16'($urandom);
      #1; checks++; if (q0 !== d) failures++;
      hist.push_back(d);
      @(negedge clk);
      if (hist.size() > 5) void'(hist.pop_front());
      if (i >= 5) begin checks++; if (q5 !== hist[0]) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
