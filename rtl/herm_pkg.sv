// herm_pkg -- field arithmetic and code constants shared by the Hermitian encoder.
//
// The code lives on the Hermitian curve x^(q+1) = y^q + y over GF(q^2). This
// package fixes the field (GF(2^GF_M) = GF(q^2), characteristic 2) and provides
// constant functions from which every module derives its tables at elaboration
// time: a combinational shift-and-add GF multiplier, powers of the primitive
// element eps, the subfield primitive gamma = eps^(q+1), the element y0 with
// y0^q + y0 = 1, the per-row constraint counts a_hat(i) of the row codes E_i,
// the information count of each column, and the generator polynomials of the
// E_i and D_l encoders. The multiplier is also used as logic inside the modules.
//
// Defaults: q = 4, GF(16) built on x^4 + x + 1 with eps = x, designed pole order
// m = 30, which gives the (64, 39) Hermitian code. The paper fixes none of these
// numbers; they are a small but non-degenerate choice and can be changed here
// (GF_M, GF_POLY, Q must stay consistent: q^2 = 2^GF_M, GF_POLY primitive).
// Negation is the identity in characteristic 2, so every "minus" of the
// algorithm becomes an XOR.
package herm_pkg;

  parameter int GF_M = 4;                       // symbol width: q^2 = 2^GF_M
  parameter logic [GF_M:0] GF_POLY = 5'b10011;  // x^4 + x + 1, primitive
  parameter int Q = 4;                          // q
  parameter int Q2 = Q * Q;                     // q^2 = number of columns
  parameter int NCYC = Q2 - 1;                  // length of the cyclic part of E_i
  parameter int M_POLE_DEFAULT = 30;            // designed pole order m of C(m)
  parameter int COLW = $clog2(Q2);              // column index width
  parameter int PHW = $clog2(Q);                // phase (row) index width
  parameter int LW = $clog2(Q + 1);             // width of a count 0..q

  typedef logic [GF_M-1:0] gf_t;
  typedef gf_t [Q-1:0] col_t;                   // one code column (q symbols), row r at [r]
  typedef gf_t [Q2-1:0] gpoly_t;                // E_i generator, coefficient t at [t]
  typedef gf_t [Q:0] dpoly_t;                   // D_l generator, coefficient t at [t]
  typedef dpoly_t [Q:0] dtab_t;                 // D_l generators indexed by degree p

  // Product in GF(2^GF_M) by shift-and-add with reduction by GF_POLY.
  function automatic gf_t gf_mul(gf_t a, gf_t b);
    gf_t r, aa;
    r  = '0;
    aa = a;
    for (int i = 0; i < GF_M; i++) begin
      if (b[i]) r = r ^ aa;
      aa = aa[GF_M-1] ? ((aa << 1) ^ GF_POLY[GF_M-1:0]) : (aa << 1);
    end
    return r;
  endfunction

  // a^e for e >= 0, with 0^0 = 1 (square and multiply).
  function automatic gf_t gf_pow(gf_t a, int e);
    gf_t r, sq;
    r  = gf_t'(1);
    sq = a;
    for (int i = 0; i < 16; i++) begin
      if (e[i]) r = gf_mul(r, sq);
      sq = gf_mul(sq, sq);
    end
    return r;
  endfunction

  // eps^e for any integer e (eps = x is primitive, order q^2-1).
  function automatic gf_t eps_pow(int e);
    int ee;
    ee = e % NCYC;
    if (ee < 0) ee = ee + NCYC;
    return gf_pow(gf_t'(2), ee);
  endfunction

  // gamma^j, gamma = eps^(q+1) generates GF(q)*.
  function automatic gf_t gamma_pow(int j);
    return eps_pow(j * (Q + 1));
  endfunction

  // Element of GF(q) that labels row r of a code column: 0, gamma^0, gamma^1, ...
  function automatic gf_t beta_of(int r);
    return (r == 0) ? gf_t'(0) : gamma_pow(r - 1);
  endfunction

  // Smallest y0 (as an integer) with y0^q + y0 = 1.
  function automatic gf_t find_y0();
    gf_t y;
    for (int v = (1 << GF_M) - 1; v >= 0; v--) begin
      y = gf_t'(v);
      if ((gf_pow(y, Q) ^ y) == gf_t'(1)) find_y0 = y;
    end
  endfunction

  // a_hat(i) = max{a : a*q + i*(q+1) <= m}; -1 when row i has no constraint.
  function automatic int a_hat_row(int m, int i);
    int num;
    num = m - i * (Q + 1);
    return (num < 0) ? -1 : num / Q;
  endfunction

  // Number of information (free) positions of row i of r~: k_i = q^2 - a_hat(i) - 1.
  function automatic int k_row(int m, int i);
    return Q2 - a_hat_row(m, i) - 1;
  endfunction

  // b_hat(j): information symbols in column j = number of rows i with k_i > j.
  function automatic int info_count(int m, int j);
    int n;
    n = 0;
    for (int i = 0; i < Q; i++) if (k_row(m, i) > j) n++;
    return n;
  endfunction

  // Generator of the time-reversed E_i code: prod_{a=1..a_hat(i)} (x + eps^-(a + i(q+1))).
  function automatic gpoly_t ec_gen(int m, int i);
    gpoly_t g, nx;
    gf_t root;
    g = '0;
    g[0] = gf_t'(1);
    for (int a = 1; a <= a_hat_row(m, i); a++) begin
      root = eps_pow(-(a + i * (Q + 1)));
      nx = '0;
      for (int t = 0; t < Q2; t++) begin
        nx[t] = gf_mul(g[t], root) ^ ((t > 0) ? g[t-1] : gf_t'(0));
      end
      g = nx;
    end
    return g;
  endfunction

  parameter gf_t Y0 = find_y0();

  // Generators of the column codes D_l: for every degree p = q - l,
  // prod_{s<p} (x + x_s) with x_s = y0 + beta_of(s) (matrix A) or beta_of(s) (matrix A').
  function automatic dtab_t d_gen_table(bit use_aprime);
    dtab_t tab;
    dpoly_t g, nx;
    gf_t root;
    tab = '0;
    for (int p = 0; p <= Q; p++) begin
      g = '0;
      g[0] = gf_t'(1);
      for (int s = 0; s < p; s++) begin
        root = use_aprime ? beta_of(s) : (Y0 ^ beta_of(s));
        nx = '0;
        for (int t = 0; t <= Q; t++) begin
          nx[t] = gf_mul(g[t], root) ^ ((t > 0) ? g[t-1] : gf_t'(0));
        end
        g = nx;
      end
      tab[p] = g;
    end
    return tab;
  endfunction

  // Horner constants of modules A and B for row r: y0 + beta (A) or beta (A').
  function automatic gf_t horner_const(int r, bit use_aprime);
    return use_aprime ? beta_of(r) : (Y0 ^ beta_of(r));
  endfunction

endpackage
