// module_d -- serial systematic encoder of the column code D_l (Module D).
//
// For a column whose first l rows of r~ are already fixed by the row codes,
// step 3 of the column solver needs a vector b~ that agrees with its input on
// rows 0..l-1 and whose remaining p = q - l rows make the first p rows of
// A^-1 b~ vanish. Row beta of A^-1 b~ = 0 is, in characteristic 2,
//   sum_t b~_t x^(q-1-t) = b~_0  at x = y0 + beta,
// and the same form holds for A'^-1 with x = beta. With
// e = (b~_0, ..., b~_{q-2}, b~_{q-1} + b~_0) this says that the polynomial
// sum_t e_t x^(q-1-t) is a multiple of g_p(x) = prod_{s<p} (x + x_s), so e is a
// codeword of a shortened cyclic-type code and a division LFSR encodes it; the
// only change is that b~_0 is added back at the last position. This follows the
// paper's hint ("standard encoding techniques for shortened cyclic codes which
// are modified in the obvious way"); the LFSR with a generator selected at run
// time from a table of 2(q+1) polynomials (herm_pkg::d_gen_table) is this
// design's realisation.
//
// Timing: one symbol per clock with valid_i, rows in order, phase_i = row.
// n_info_i = l and use_aprime_i must be steady over the column. sym_o is
// combinational: sym_i for rows < l, the parity symbol for rows >= l.
module module_d
  import herm_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           valid_i,
  input  logic [PHW-1:0] phase_i,
  input  logic [LW-1:0]  n_info_i,     // l, 0..q
  input  logic           use_aprime_i,
  input  gf_t            sym_i,
  output gf_t            sym_o
);

  localparam dtab_t TAB_A  = d_gen_table(1'b0);
  localparam dtab_t TAB_AP = d_gen_table(1'b1);

  gf_t [Q-1:0] s_q, s_eff, s_nx;
  gf_t    d0_q, top, fb;
  dpoly_t gen;
  int     p;
  logic   info_ph;

  always_comb begin
    p       = Q - int'(n_info_i);
    gen     = use_aprime_i ? TAB_AP[p] : TAB_A[p];
    info_ph = int'(phase_i) < int'(n_info_i);
    s_eff   = (phase_i == '0) ? '0 : s_q;
    top     = (p > 0) ? s_eff[p-1] : gf_t'(0);
    fb      = sym_i ^ top;
    s_nx    = '0;
    for (int t = 0; t < Q; t++) begin
      if (t < p) begin
        s_nx[t] = (t > 0) ? s_eff[t-1] : gf_t'(0);
        if (info_ph) s_nx[t] = s_nx[t] ^ gf_mul(fb, gen[t]);
      end
    end
    if (info_ph)                           sym_o = sym_i;
    else if (phase_i == PHW'(Q - 1) && Q > 1) sym_o = top ^ d0_q;
    else                                   sym_o = top;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_q  <= '0;
      d0_q <= '0;
    end else if (valid_i) begin
      s_q <= s_nx;
      if (phase_i == '0) d0_q <= sym_o;
    end
  end

endmodule
