// ec_encoder -- serial systematic encoder of one row code E_i (element of Module C).
//
// Row i of the transformed array r~ must be a word of the extended code
//   E_i = { r in GF(q^2)^(q^2) : sum_{t<q^2-1} r_t xi_a^t = 0 for a = 1..a_hat(i),
//                                r_{q^2-1} + sum_{t<q^2-1} r_t xi_0^t = 0 },
//   xi_a = eps^(a + i(q+1)),  a_hat(i) = floor((m - i(q+1)) / q).
// The first k_i = q^2 - a_hat(i) - 1 positions are free; the encoder returns
// the a_hat(i) parity symbols and the extension symbol in position order.
//
// How: symbols arrive in position order t = 0, 1, ..., so position t is treated
// as the coefficient of x^(q^2-2-t). The reversed word then has zeros
// eps^-(a + i(q+1)), and an ordinary Reed-Solomon division LFSR with that
// generator (table from herm_pkg::ec_gen) yields the parity symbols, highest
// register first. A Horner accumulator acc := acc * xi_0^-1 + r_t over
// positions 0..q^2-2 gives the extension symbol xi_0^-1 * acc. The paper only
// says that a modified RS encoder does the job; the LFSR form, the reversal and
// the Horner accumulator are this design's choices.
//
// Interface and timing: the block is clocked every cycle but acts only when
// en_i is high, once per code column (every q cycles in the encoder, the 1/q
// rate of the paper). col_i is the position t. sym_o is combinational: 0 while
// t < k_i, the parity symbol for k_i <= t < q^2-1, the extension symbol at
// t = q^2-1. At t < k_i the symbol on sym_i is absorbed; at later positions
// the encoder absorbs its own sym_o. Position 0 restarts the codeword.
module ec_encoder
  import herm_pkg::*;
#(
  parameter int ROW    = 0,               // row i of r~
  parameter int M_POLE = M_POLE_DEFAULT   // designed pole order m
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            en_i,
  input  logic [COLW-1:0] col_i,
  input  gf_t             sym_i,
  output gf_t             sym_o
);

  localparam int     AH     = a_hat_row(M_POLE, ROW);
  localparam int     K      = k_row(M_POLE, ROW);
  localparam gpoly_t GEN    = ec_gen(M_POLE, ROW);
  localparam gf_t    XI0INV = eps_pow(-(ROW * (Q + 1)));

  initial begin
    assert (AH <= Q2 - 2) else $error("ec_encoder: m too large for q");
  end

  int unsigned col;
  logic info_ph, ext_ph;
  gf_t  parity, sym_w, acc_q;

  assign col     = int'(col_i);
  assign info_ph = col < K;
  assign ext_ph  = (col == NCYC) && (K <= NCYC);
  assign sym_o   = info_ph ? gf_t'(0) : (ext_ph ? gf_mul(acc_q, XI0INV) : parity);
  assign sym_w   = info_ph ? sym_i : sym_o;

  // Extension-symbol accumulator over positions 0 .. q^2-2.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc_q <= '0;
    else if (en_i && col < NCYC) acc_q <= ((col == 0) ? gf_t'(0) : gf_mul(acc_q, XI0INV)) ^ sym_w;
  end

  if (AH >= 1) begin : g_lfsr
    gf_t [AH-1:0] s_q, s_eff, s_nx;
    gf_t fb;
    always_comb begin
      s_eff = (col == 0) ? '0 : s_q;
      fb    = sym_i ^ s_eff[AH-1];
      for (int t = 0; t < AH; t++) begin
        if (info_ph) s_nx[t] = ((t > 0) ? s_eff[t-1] : gf_t'(0)) ^ gf_mul(fb, GEN[t]);
        else         s_nx[t] = (t > 0) ? s_eff[t-1] : gf_t'(0);
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) s_q <= '0;
      else if (en_i) s_q <= s_nx;
    end
    assign parity = s_q[AH-1];
  end else begin : g_nolfsr
    assign parity = '0;
  end

endmodule
