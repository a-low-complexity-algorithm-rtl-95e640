// herm_ref_pkg -- reference arithmetic for the testbenches of the Hermitian encoder.
//
// Written apart from the design's own functions so that the testbenches check
// the RTL against independently computed numbers: products are formed by a
// carry-less multiplication followed by a separate modular reduction, matrix
// entries of A, A', A^-1 and A'^-1 are taken straight from their closed forms,
// and the curve points and syndromes are evaluated from their definitions.
// Only the field size, the modulus and q are shared with the design.
package herm_ref_pkg;
  import herm_pkg::GF_M, herm_pkg::GF_POLY, herm_pkg::Q, herm_pkg::Q2, herm_pkg::gf_t;

  function automatic gf_t rmul(gf_t a, gf_t b);
    logic [2*GF_M-2:0] p;
    p = '0;
    for (int i = 0; i < GF_M; i++) if (a[i]) p = p ^ ((2*GF_M-1)'(b) << i);
    for (int i = 2*GF_M-2; i >= GF_M; i--)
      if (p[i]) p = p ^ ((2*GF_M-1)'(GF_POLY) << (i - GF_M));
    return p[GF_M-1:0];
  endfunction

  function automatic gf_t rpow(gf_t a, int e);
    gf_t r;
    r = gf_t'(1);
    for (int i = 0; i < e; i++) r = rmul(r, a);
    return r;
  endfunction

  function automatic gf_t reps(int e);
    int ee;
    ee = e % (Q2 - 1);
    if (ee < 0) ee += Q2 - 1;
    return rpow(gf_t'(2), ee);
  endfunction

  function automatic gf_t ry0();
    for (int v = 0; v < (1 << GF_M); v++)
      if ((rpow(gf_t'(v), Q) ^ gf_t'(v)) == gf_t'(1)) return gf_t'(v);
    return '0;
  endfunction

  // Label of row r: 0, gamma^0, gamma^1, ... with gamma = eps^(q+1).
  function automatic gf_t rbeta(int r);
    return (r == 0) ? gf_t'(0) : reps((r - 1) * (Q + 1));
  endfunction

  // Entry (i, r) of A (row power i, column label beta_r) or of A'.
  function automatic gf_t ref_a(int i, int r, bit aprime);
    if (aprime) return rpow(rbeta(r), i);
    return rpow(ry0() ^ rbeta(r), i);
  endfunction

  // Entry (r, t) of A^-1 or A'^-1 as printed in Lemma 3 (minus = plus here).
  function automatic gf_t ref_ainv(int r, int t, bit aprime);
    gf_t h;
    if (!aprime) begin
      h = ry0() ^ rbeta(r);
      if (t == 0) return gf_t'(1) ^ rpow(h, Q - 1);
      return rpow(h, Q - 1 - t);
    end
    if (r == 0) return (t == 0 || t == Q - 1) ? gf_t'(1) : gf_t'(0);
    if (t == 0) return gf_t'(0);
    return rpow(rbeta(r), Q - 1 - t);
  endfunction

  function automatic int ref_a_hat(int m, int i);
    int num;
    num = m - i * (Q + 1);
    return (num < 0) ? -1 : num / Q;
  endfunction

endpackage
