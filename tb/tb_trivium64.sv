// tb_trivium64: compares the 64-bit-per-cycle Trivium against a
// bit-serial software model (same key/IV loading, 1152 warm-up steps)
// for several random keys and IVs, and checks that the key stream
// becomes valid exactly 18 cycles after init and advances only on next.
module tb_trivium64;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic init = 0, next = 0, ks_valid;
  logic [79:0] key = 0, iv = 0;
  logic [63:0] ks;
  int checks = 0, failures = 0;
  trivium64 dut (.*);

  logic [288:1] st;
  function automatic bit step();
    bit t1, t2, t3, z;
    t1 = st[66] ^ st[93]; t2 = st[162] ^ st[177]; t3 = st[243] ^ st[288];
    z = t1 ^ t2 ^ t3;
    t1 ^= (st[91] & st[92]) ^ st[171];
    t2 ^= (st[175] & st[176]) ^ st[264];
    t3 ^= (st[286] & st[287]) ^ st[69];
    st[93:1] = {st[92:1], t3}; st[177:94] = {st[176:94], t1}; st[288:178] = {st[287:178], t2};
    return z;
  endfunction

  initial begin
    #1ms; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst = 0;
    for (int t = 0; t < 4; t++) begin
      int wait_c;
      key = {16'($urandom), $urandom, $urandom}; iv = {16'($urandom), $urandom, $urandom};
      st = '0; st[80:1] = key; st[173:94] = iv; st[288:286] = 3'b111;
      for (int i = 0; i < 1152; i++) void'(step());
      init = 1; @(negedge clk); init = 0;
      wait_c = 1;
      while (!ks_valid) begin @(negedge clk); wait_c++; end
      checks++; if (wait_c != 19) begin failures++; $display("FAIL warm-up %0d", wait_c); end
      for (int w = 0; w < 20; w++) begin
        logic [63:0] e;
        for (int i = 0; i < 64; i++) e[i] = step();
        next = (w % 3) != 2;
        checks++; if (ks !== e) begin failures++; $display("FAIL word %0d", w); end
        if (!next) begin
          @(negedge clk);      // held: same word must stay
          checks++; if (ks !== e) failures++;
          next = 1;
        end
        @(negedge clk);
        next = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
