// tb_mod_addsub: random and corner-case check of modular add/sub against
// a software model, for a 60-bit prime.
module tb_mod_addsub;
  import tb_math_pkg::*;
  localparam u64 Q = 64'h0fffffffff840001;
  logic [59:0] a, b, q, sum, diff;
  int checks = 0, failures = 0;
  mod_addsub #(.W(60)) dut (.a, .b, .q, .sum, .diff);
  initial begin
    #100us; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  initial begin
    q = 60'(Q);
    for (int i = 0; i < 2000; i++) begin
      u64 x, y;
      x = (i < 4) ? ((i & 1) ? Q - 1 : 0) : {$urandom, $urandom} % Q;
      y = (i < 4) ? ((i & 2) ? Q - 1 : 0) : {$urandom, $urandom} % Q;
      a = 60'(x); b = 60'(y); #1;
      checks += 2;
      if (u64'(sum)  != addm(x, y, Q)) failures++;
      if (u64'(diff) != subm(x, y, Q)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
