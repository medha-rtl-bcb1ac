// tb_auto_addr_gen: for N = 2^14 and several odd Galois elements k,
// checks that the generated read address j satisfies
// 2*brv(j)+1 = (2*brv(i)+1)*k mod 2N for every output slot i, and that
// the map is a permutation.
module tb_auto_addr_gen;
  import tb_math_pkg::*;
  localparam int LOGN = 14, N = 1 << LOGN;
  logic [LOGN-1:0] i, j;
  logic [LOGN:0]   galois;
  int checks = 0, failures = 0;
  auto_addr_gen #(.LOGN(LOGN)) dut (.i, .galois, .j);
  initial begin
    #10ms; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  initial begin
    int ks [4] = '{5, 25, 2 * N - 1, 3};
    foreach (ks[t]) begin
      bit seen [N];
      int bad; bad = 0;
      galois = (LOGN+1)'(ks[t]);
      for (int x = 0; x < N; x++) seen[x] = 0;
      for (int x = 0; x < N; x++) begin
        i = LOGN'(x); #1;
        if (((2 * brv(int'(j), LOGN) + 1) % (2 * N)) != ((2 * brv(x, LOGN) + 1) * ks[t]) % (2 * N)) bad++;
        if (seen[int'(j)]) bad++;
        seen[int'(j)] = 1;
      end
      checks++; if (bad != 0) begin failures++; $display("FAIL k=%0d bad=%0d", ks[t], bad); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
