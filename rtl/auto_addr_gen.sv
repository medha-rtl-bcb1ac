// auto_addr_gen: read-address generator of the automorphism unit.
// An automorphism a(x) -> a(x^k) (k odd, the Galois element) is a pure
// permutation of the coefficients when the polynomial is kept in the NTT
// domain. With the forward NTT of rpau_main_core, slot i holds the value
// of the polynomial at psi^(2*brv(i)+1) (psi a primitive 2N-th root of
// unity, brv the LOGN-bit bit reversal). Output slot i of the permuted
// polynomial therefore takes input slot j with
//      2*brv(j) + 1 = (2*brv(i) + 1) * k   (mod 2N).
// The address is computed on the fly from the Galois element, as the
// published automorphism unit does; the formula itself is this design's
// derivation for its own NTT ordering. Combinational.
module auto_addr_gen #(
  parameter int unsigned LOGN = 14
) (
  input  logic [LOGN-1:0] i,
  input  logic [LOGN:0]   galois,   // Galois element mod 2N, odd
  output logic [LOGN-1:0] j
);
  function automatic logic [LOGN-1:0] brv(input logic [LOGN-1:0] x);
    for (int b = 0; b < int'(LOGN); b++) brv[b] = x[LOGN-1-b];
  endfunction

  logic [LOGN:0]    ei;      // 2*brv(i)+1, LOGN+1 bits (mod 2N)
  logic [LOGN:0]    kk;
  logic [LOGN:0]    e;

  always_comb begin
    ei   = {brv(i), 1'b1};
    kk   = galois;
    e    = ei * kk;              // truncated to LOGN+1 bits: mod 2N
    j    = brv(e[LOGN:1]);       // (e-1)/2, e is odd
  end
  // an odd Galois element keeps the exponent odd
  always_comb a_odd: assert (!galois[0] || e[0]);
endmodule
