// q0_reduce: add-shift reduction of a 120-bit product modulo the sparse
// prime q0 = 2^59 + 2^25 + 2^22 - 2^20 + 1, the first modulus of the RNS
// base. It uses 2^59 = -(2^25 + 2^22 - 2^20 + 1) (mod q0): the bits above
// position 59 are folded back with shifts and adds only, no multiplier.
// Three folds bring a 120-bit input into (-2^26, 2^59 + 2^26); one final
// correction (add or subtract q0) gives the result in [0, q0).
// The folding relation is the published one; the number of folds and the
// signed intermediate representation are this design's choice.
// Combinational; mod_mul places it inside its pipeline.
module q0_reduce (
  input  logic [119:0] x,
  output logic [59:0]  r
);
  localparam logic signed [63:0] Q0 = 64'sh0800_0000_0230_0001;

  // hi * (2^25 + 2^22 - 2^20 + 1) using shifts and adds
  function automatic logic signed [95:0] times_k(input logic signed [95:0] hi);
    return (hi <<< 25) + (hi <<< 22) - (hi <<< 20) + hi;
  endfunction

  logic signed [127:0] v0;
  logic signed [95:0]  h1, h2, h3;
  logic signed [95:0]  v1, v2, v3;
  logic signed [95:0]  v4;

  always_comb begin
    v0 = $signed({8'd0, x});
    // fold 1: x = h1*2^59 + l1, h1 < 2^61
    h1 = 96'(v0 >>> 59);
    v1 = $signed({37'd0, v0[58:0]}) - times_k(h1);          // |v1| < 2^87
    // fold 2
    h2 = v1 >>> 59;
    v2 = $signed({37'd0, v1[58:0]}) - times_k(h2);          // (-2^54, 2^59+2^54)
    // fold 3
    h3 = v2 >>> 59;
    v3 = $signed({37'd0, v2[58:0]}) - times_k(h3);          // (-2^26, 2^59+2^26)
    // final correction into [0, q0)
    if (v3 < 0)                      v4 = v3 + 96'(Q0);
    else if (v3 >= 96'(Q0))          v4 = v3 - 96'(Q0);
    else                             v4 = v3;
    r = v4[59:0];
  end

  // the corrected value is a 60-bit residue
  always_comb a_range: assert (v4[95:60] == '0);
endmodule
