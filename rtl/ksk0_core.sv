// ksk0_core: on-the-fly generator of the pseudo-random key-switching key
// part (KSK0) for one dyadic lane. KSK0 is uniformly random, so only its
// seed needs to be stored; this block expands the seed with a trivium64
// instance into one coefficient per cycle.
//   key = {16'b0, seed}, iv = {stream, lane}: every (KSK polynomial,
//   lane) pair gets its own key stream.
//   coefficient = low qbits bits of the 64-bit word, minus q once if the
//   value is >= q, so every coefficient is in [0, q).
// After start, the first coefficient is valid 19 cycles later (load plus
// 18 warm-up cycles); afterwards one coefficient per cycle while next is
// high. Following the published design, KSK0 is generated by a Trivium
// PRNG instead of being stored; the sampling by one conditional
// subtraction (slightly non-uniform, no rejection) and the key/IV
// layout are this design's choices.
// Lint reports ks[63:60] unused: a coefficient needs at most W = 60 of
// the 64 key-stream bits per cycle, the rest is discarded on purpose.
module ksk0_core #(
  parameter int unsigned W      = 60,
  parameter int unsigned LANE_W = 4
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              start,
  input  logic [63:0]       seed,
  input  logic [15:0]       stream,
  input  logic [LANE_W-1:0] lane,
  input  logic [W-1:0]      q,
  input  logic [6:0]        qbits,   // bit length of q, <= W
  input  logic              next,
  output logic              coef_valid,
  output logic [W-1:0]      coef
);
  logic [63:0] ks;
  logic [79:0] iv;
  assign iv = 80'({stream, lane});

  trivium64 u_prng (
    .clk, .rst, .init(start), .key({16'b0, seed}), .iv,
    .next, .ks_valid(coef_valid), .ks);

  logic [W-1:0] mask, raw;
  always_comb begin
    for (int i = 0; i < int'(W); i++) mask[i] = (i < int'(qbits));
    raw  = W'(ks) & mask;
    coef = (raw >= q) ? raw - q : raw;
  end
endmodule
