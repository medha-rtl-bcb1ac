// tb_math_pkg: reference arithmetic for the testbenches — modular
// add/sub/mul/pow/inverse on 60-bit residues (128-bit intermediates),
// Barrett constants, bit reversal, primitive roots of unity, polynomial
// evaluation and a bit-serial Trivium model. Used only by testbenches.
package tb_math_pkg;
  typedef logic [63:0] u64;

  function automatic u64 addm(u64 a, u64 b, u64 q);
    logic [64:0] s; s = 65'(a) + 65'(b);
    if (s >= 65'(q)) s = s - 65'(q);
    return u64'(s);
  endfunction
  function automatic u64 subm(u64 a, u64 b, u64 q);
    return (a >= b) ? a - b : a + q - b;
  endfunction
  function automatic u64 mulm(u64 a, u64 b, u64 q);
    logic [127:0] p; p = 128'(a) * 128'(b);
    return u64'(p % 128'(q));
  endfunction
  function automatic u64 powm(u64 b, u64 e, u64 q);
    u64 r; r = 1;
    while (e != 0) begin
      if (e[0]) r = mulm(r, b, q);
      b = mulm(b, b, q); e = e >> 1;
    end
    return r;
  endfunction
  function automatic u64 invm(u64 a, u64 q);
    return powm(a, q - 2, q);
  endfunction
  function automatic logic [67:0] barrett_mu(u64 q);
    logic [127:0] one; one = 128'd1 << 120;
    return 68'(one / 128'(q));
  endfunction
  function automatic int brv(int x, int bits);
    int r; r = 0;
    for (int i = 0; i < bits; i++) if (x & (1 << i)) r |= 1 << (bits - 1 - i);
    return r;
  endfunction
  // primitive m-th root of unity (m a power of two dividing q-1)
  function automatic u64 prim_root(u64 q, int m);
    u64 z;
    for (u64 x = 2; x < 1000; x++) begin
      z = powm(x, (q - 1) / u64'(m), q);
      if (powm(z, u64'(m / 2), q) == q - 1) return z;
    end
    return 0;
  endfunction
  // zeta^e for an exponent taken mod m (m = order of zeta)
  function automatic u64 zpow(u64 z, int e, int m, u64 q);
    int ee; ee = e % m; if (ee < 0) ee += m;
    return powm(z, u64'(ee), q);
  endfunction
  function automatic u64 eval_poly(input u64 a[], input u64 x, input u64 q);
    u64 r; r = 0;
    for (int i = a.size() - 1; i >= 0; i--) r = addm(mulm(r, x, q), a[i], q);
    return r;
  endfunction
  function automatic int ilog2(int x);
    int r; r = 0; while ((1 << r) < x) r++; return r;
  endfunction
endpackage
