// tb_q0_reduce: checks the add-shift reduction modulo the sparse prime
// q0 against the % operator, for random 120-bit products of residues,
// random 120-bit values and corner cases.
module tb_q0_reduce;
  import tb_math_pkg::*;
  localparam u64 Q0 = 64'h0800000002300001;
  logic [119:0] x;
  logic [59:0]  r;
  int checks = 0, failures = 0;
  q0_reduce dut (.x, .r);
  initial begin
    #100us; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  initial begin
    for (int i = 0; i < 3000; i++) begin
      u64 a, b;
      a = {$urandom, $urandom} % Q0; b = {$urandom, $urandom} % Q0;
      if (i == 0) begin a = Q0 - 1; b = Q0 - 1; end
      if (i == 1) begin a = 0; b = 0; end
      if (i % 3 == 2) x = {$urandom, $urandom, $urandom, $urandom};
      else            x = 120'(a) * 120'(b);
      #1;
      checks++;
      if (128'(r) != 128'(x) % 128'(Q0)) begin
        failures++;
        if (failures < 5) $display("FAIL x=%h r=%h", x, r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
