// trivium64: Trivium stream cipher unrolled 64 times, the PRNG used to
// generate the pseudo-random key-switching key part on the fly.
// The 288-bit state is loaded from an 80-bit key and an 80-bit IV
// (s[1+i] = key[i], s[94+i] = iv[i], s[286..288] = 1, all else 0) and
// warmed up for 4*288 = 1152 steps, i.e. 18 cycles of 64 steps. After
// that, ks is valid (ks_valid=1) and holds the next 64 key-stream bits
// (ks[0] is the first bit); asserting next advances to the following 64.
// The published design uses 64-bit Trivium instances with 18 cycles of
// initialisation and 64 bits per cycle; the bit ordering of key, IV and
// output word is this design's choice.
module trivium64 (
  input  logic        clk,
  input  logic        rst,
  input  logic        init,       // load key/iv and start warm-up
  input  logic [79:0] key,
  input  logic [79:0] iv,
  input  logic        next,       // consume ks
  output logic        ks_valid,
  output logic [63:0] ks
);
  localparam int unsigned WARM = 18;

  logic [288:1] s, s_nx;
  logic [4:0]   warm_cnt;
  logic         warm;

  always_comb begin
    logic [288:1] x;
    logic t1, t2, t3;
    x = s;
    for (int i = 0; i < 64; i++) begin
      t1 = x[66] ^ x[93];
      t2 = x[162] ^ x[177];
      t3 = x[243] ^ x[288];
      ks[i] = t1 ^ t2 ^ t3;
      t1 = t1 ^ (x[91] & x[92]) ^ x[171];
      t2 = t2 ^ (x[175] & x[176]) ^ x[264];
      t3 = t3 ^ (x[286] & x[287]) ^ x[69];
      x[93:1]    = {x[92:1], t3};
      x[177:94]  = {x[176:94], t1};
      x[288:178] = {x[287:178], t2};
    end
    s_nx = x;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      s <= '0; warm_cnt <= '0; warm <= 1'b0; ks_valid <= 1'b0;
    end else if (init) begin
      s <= '0;
      s[80:1]    <= key;
      s[173:94]  <= iv;
      s[288:286] <= 3'b111;
      warm_cnt   <= 5'(WARM);
      warm       <= 1'b1;
      ks_valid   <= 1'b0;
    end else if (warm) begin
      s <= s_nx;
      warm_cnt <= warm_cnt - 5'd1;
      if (warm_cnt == 5'd1) begin
        warm <= 1'b0; ks_valid <= 1'b1;
      end
    end else if (next && ks_valid) begin
      s <= s_nx;
    end
  end

  a_next_valid: assert property (@(posedge clk) disable iff (rst) next |-> ks_valid || init);
endmodule
