// module_a -- column times A (or A'), parallel in, serial out (Module A).
//
// Computes b = A d for one code column d of q symbols and presents b_0 .. b_{q-1}
// on sym_o, one per clock. Row i of A holds (y0 + beta)^i for the q column labels
// beta = 0, gamma^0, ..., gamma^(q-2); row i of A' holds beta^i (with 0^0 = 1).
// Hence b_i = sum_beta h_beta^i d_beta with h_beta = y0 + beta (A) or beta (A').
//
// Implementation (this design's choice; the paper gives only the function): one
// register w_beta per lane, loaded with d_beta, multiplied by the constant
// h_beta once per clock, and an XOR tree over the lanes. That is q constant
// multipliers and q registers.
//
// Timing: load_i captures d_i and the matrix choice (use_aprime_i) at a clock
// edge; in the next cycle sym_o = b_0, and every cycle with step_i high advances
// to the next row, so b_i appears i cycles after the load. load_i wins over step_i.
module module_a
  import herm_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic load_i,        // capture a new column
  input  logic use_aprime_i,  // column q^2-1 (alpha = 0) uses A'
  input  col_t d_i,           // column, row r at d_i[r]
  input  logic step_i,        // advance to the next row
  output gf_t  sym_o          // (A d)_i for the current row i
);

  col_t w_q;
  logic aprime_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q      <= '0;
      aprime_q <= 1'b0;
    end else if (load_i) begin
      w_q      <= d_i;
      aprime_q <= use_aprime_i;
    end else if (step_i) begin
      for (int r = 0; r < Q; r++) begin
        w_q[r] <= gf_mul(w_q[r], horner_const(r, aprime_q));
      end
    end
  end

  always_comb begin
    sym_o = '0;
    for (int r = 0; r < Q; r++) sym_o = sym_o ^ w_q[r];
  end

endmodule
