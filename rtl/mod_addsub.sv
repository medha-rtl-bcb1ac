// mod_addsub: modular adder and subtractor for residues in [0, q).
// sum  = (a + b) mod q  : one W+1-bit adder and a conditional subtraction of q.
// diff = (a - b) mod q  : one subtractor and a conditional addition of q.
// Purely combinational; the caller registers the results. The structure
// (plain fabric adders with one correction step) follows the published
// description of the modular adder/subtractor; inputs must already be
// reduced (a, b < q), which this design assumes everywhere.
module mod_addsub #(
  parameter int unsigned W = 60
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] q,
  output logic [W-1:0] sum,
  output logic [W-1:0] diff
);
  logic [W:0] s_raw, s_red;
  logic [W:0] d_raw;

  always_comb begin
    s_raw = {1'b0, a} + {1'b0, b};
    s_red = s_raw - {1'b0, q};
    sum   = s_red[W] ? s_raw[W-1:0] : s_red[W-1:0];   // borrow: s_raw < q
    d_raw = {1'b0, a} - {1'b0, b};
    diff  = d_raw[W] ? (d_raw[W-1:0] + q) : d_raw[W-1:0];
  end
endmodule
