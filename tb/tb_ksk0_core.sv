// tb_ksk0_core: checks the KSK0 coefficient generator: coefficients are
// valid 19 cycles after start, lie in [0, q), match the sampling rule
// applied to a bit-serial Trivium model, and different lanes give
// different streams.
module tb_ksk0_core;
  localparam int W = 60;
  localparam logic [63:0] Q = 64'h0fffffffff330001;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic start = 0, next = 0, v0, v1;
  logic [63:0] seed = 0;
  logic [15:0] stream = 16'd7;
  logic [W-1:0] q, c0, c1;
  logic [6:0] qbits = 7'd60;
  int checks = 0, failures = 0;
  ksk0_core #(.W(W)) l0 (.clk, .rst, .start, .seed, .stream, .lane(4'd0), .q, .qbits, .next, .coef_valid(v0), .coef(c0));
  ksk0_core #(.W(W)) l1 (.clk, .rst, .start, .seed, .stream, .lane(4'd1), .q, .qbits, .next, .coef_valid(v1), .coef(c1));

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
    int wc, same;
    q = W'(Q);
    seed = {$urandom, $urandom};
    st = '0; st[80:1] = {16'b0, seed}; st[173:94] = 80'({stream, 4'd0}); st[288:286] = 3'b111;
    for (int i = 0; i < 1152; i++) void'(step());
    repeat (2) @(negedge clk); rst = 0;
    start = 1; @(negedge clk); start = 0;
    wc = 1; while (!v0) begin @(negedge clk); wc++; end
    checks++; if (wc != 19) begin failures++; $display("FAIL start-up %0d", wc); end
    same = 0;
    for (int i = 0; i < 500; i++) begin
      logic [63:0] word, e;
      for (int b = 0; b < 64; b++) word[b] = step();
      e = {4'b0, word[59:0]};
      if (e >= Q) e = e - Q;
      checks += 2;
      if (c0 >= q) failures++;
      if (64'(c0) != e) failures++;
      if (c0 == c1) same++;
      next = 1; @(negedge clk); next = 0;
    end
    checks++; if (same > 2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
