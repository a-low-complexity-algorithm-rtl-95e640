// module_b -- serial column times A^-1 (or A'^-1), parallel out (Module B).
//
// Accepts a column b~ of q symbols serially (b~_0 first) and, after the q-th
// symbol, presents c = A^-1 b~ (or A'^-1 b~ for the last code column) on y_o.
//
// The inverses are those of Lemma 3. Row beta of A^-1 is
// (1 - h^(q-1), h^(q-2), ..., h^0) with h = y0 + beta, and row beta of A'^-1 is
// (1, 0, ..., 0, -1) for beta = 0 and (0, -beta^(q-2), ..., -beta, -1) otherwise.
// In characteristic 2 both reduce to one Horner recursion per row:
//   acc_beta := (A ? b~_0 : 0), then acc_beta := acc_beta * h_beta + b~_i for i >= 1,
//   y_beta    = acc_beta + (A or beta = 0 ? b~_0 : 0),
// with h_beta = y0 + beta for A and beta for A'. That gives q constant
// multipliers and q accumulators plus one register for b~_0; the paper states
// only the function of the block, so this recursion is this design's choice.
//
// Timing: valid_i marks an input symbol; first_i marks b~_0 and last_i b~_{q-1}.
// use_aprime_i must be steady over the column. One cycle after the symbol with
// last_i, y_o holds the result and y_valid_o is high for that one cycle; y_o
// then stays unchanged until the next column completes.
module module_b
  import herm_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic valid_i,
  input  logic first_i,
  input  logic last_i,
  input  logic use_aprime_i,
  input  gf_t  sym_i,
  output col_t y_o,
  output logic y_valid_o
);

  col_t acc_q;
  gf_t  b0_q;
  col_t acc_nx;
  col_t y_nx;

  always_comb begin
    for (int r = 0; r < Q; r++) begin
      if (first_i) acc_nx[r] = use_aprime_i ? gf_t'(0) : sym_i;
      else         acc_nx[r] = gf_mul(acc_q[r], horner_const(r, use_aprime_i)) ^ sym_i;
      y_nx[r] = acc_nx[r] ^ ((!use_aprime_i || r == 0) ? b0_q : gf_t'(0));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q     <= '0;
      b0_q      <= '0;
      y_o       <= '0;
      y_valid_o <= 1'b0;
    end else begin
      y_valid_o <= valid_i && last_i;
      if (valid_i) begin
        acc_q <= acc_nx;
        if (first_i) b0_q <= sym_i;
        if (last_i) y_o <= y_nx;
      end
    end
  end

endmodule
