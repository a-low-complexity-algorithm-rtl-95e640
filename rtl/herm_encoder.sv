// herm_encoder -- column-serial systematic encoder for the Hermitian code C(m).
//
// A codeword is a q x q^2 array c: row r is labelled beta = 0, gamma^0, ...,
// gamma^(q-2) (beta in GF(q)), column j by alpha = eps^j for j < q^2-1 and
// alpha = 0 for j = q^2-1, i.e. the rational point
// (alpha, alpha^(q+1)(y0 + beta) + delta(alpha) beta) of x^(q+1) = y^q + y.
// Column j carries b_hat(j) information symbols in rows 0..b_hat(j)-1 and
// q - b_hat(j) check symbols below them (row r holds q^2 - a_hat(q-1-r) - 1
// information symbols). The encoder keeps a second array r~ with columns
// A_j c_j (A_j = A, or A' for the last column); C(m) is exactly the set of c
// whose r~ has every row i in the extended RS-like code E_i. Columns are
// processed left to right; per column the row codes fix the first
// l = q - b_hat(j) symbols of r~_j, and the column solver (Algorithm 3 of the
// construction) finds the unknown check symbols of c_j and the free
// symbols of r~_j in q clocks:
//   1. b  = A_j (info, 0)        module_a, serial over the rows
//   2. b^ = v - b on rows < l    v from module_c (row encoders), one XOR
//   3. b~ = D_l systematic(b^)   module_d
//   4. c_j = (info, 0) + A_j^-1 b~   module_b, parallel, plus one XOR per row
//   5. r~_j = b~ + b             one XOR, written back into module_c
// The datapath is the paper's block diagram: A feeds two adders, the upper
// one (with the row-encoder output from switch b) feeds D, the lower one
// (with D's output) feeds the row encoders through switch a, D also feeds B,
// and B's parallel result is added to the held input column.
//
// Interface: in_valid_i/in_ready_o is a valid/ready handshake for one column
// of q symbols (row r on in_col_i[r]); rows at or beyond in_n_info_o are ignored.
// in_col_idx_o names the column that the next transfer fills. Columns are taken
// in order 0..q^2-1 and the count wraps for the next codeword. One column is
// accepted every q clocks at best (in_ready_o is high in the last row clock
// and when idle). The coded column appears q+1 clocks after its transfer, with
// out_valid_o high for one clock and out_col_o held until the next column;
// out_last_o marks column q^2-1. A codeword of n = q^3 symbols thus takes q^3
// clocks at full rate. Reset is asynchronous, active low, and clears all state.
//
// Paper versus this design: the algorithm, the module split and the data flow
// follow the paper; q, the field, m, y0, the handshake, the column order of
// the information symbols, the internal form of each module and the q+1 clock
// latency are this design's choices (see each module's header).
module herm_encoder
  import herm_pkg::*;
#(
  parameter int M_POLE = M_POLE_DEFAULT   // designed pole order m of C(m)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid_i,
  output logic            in_ready_o,
  input  col_t            in_col_i,
  output logic [COLW-1:0] in_col_idx_o,
  output logic [LW-1:0]   in_n_info_o,
  output logic            out_valid_o,
  output col_t            out_col_o,
  output logic [COLW-1:0] out_col_idx_o,
  output logic            out_last_o
);

  initial begin
    assert (a_hat_row(M_POLE, 0) <= Q2 - 2 && M_POLE >= 0)
      else $error("herm_encoder: M_POLE out of range for this q");
  end

  // ---------------------------------------------------------------- control
  logic            busy_q, aprime_q, accept, last_ph;
  logic [PHW-1:0]  phase_q;
  logic [COLW-1:0] col_q, col_next_q;
  logic [LW-1:0]   l_q;          // rows of r~ fixed by the row codes in this column
  col_t            d_masked, x_hold_q, x_pipe_q;

  assign last_ph      = busy_q && (phase_q == PHW'(Q - 1));
  assign in_ready_o   = !busy_q || last_ph;
  assign accept       = in_valid_i && in_ready_o;
  assign in_col_idx_o = col_next_q;
  assign in_n_info_o  = LW'(info_count(M_POLE, int'(col_next_q)));

  always_comb begin
    for (int r = 0; r < Q; r++)
      d_masked[r] = (r < int'(in_n_info_o)) ? in_col_i[r] : gf_t'(0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q     <= 1'b0;
      aprime_q   <= 1'b0;
      phase_q    <= '0;
      col_q      <= '0;
      col_next_q <= '0;
      l_q        <= '0;
      x_hold_q   <= '0;
    end else if (accept) begin
      busy_q     <= 1'b1;
      phase_q    <= '0;
      col_q      <= col_next_q;
      aprime_q   <= (int'(col_next_q) == Q2 - 1);
      l_q        <= LW'(Q) - in_n_info_o;
      x_hold_q   <= d_masked;
      col_next_q <= (int'(col_next_q) == Q2 - 1) ? '0 : col_next_q + 1'b1;
    end else if (busy_q) begin
      phase_q <= phase_q + 1'b1;
      if (last_ph) busy_q <= 1'b0;
    end
  end

  // --------------------------------------------------------------- datapath
  gf_t  b_sym, v_sym, bhat_sym, btil_sym, rt_sym;
  logic fixed_row;
  col_t b_par;
  logic b_valid;

  assign fixed_row = int'(phase_q) < int'(l_q);
  assign bhat_sym  = fixed_row ? (b_sym ^ v_sym) : gf_t'(0);  // upper adder: A - C
  assign rt_sym    = b_sym ^ btil_sym;                         // lower adder: A + D

  module_a u_a (
    .clk          (clk),
    .rst_n        (rst_n),
    .load_i       (accept),
    .use_aprime_i (int'(col_next_q) == Q2 - 1),
    .d_i          (d_masked),
    .step_i       (busy_q),
    .sym_o        (b_sym)
  );

  module_c #(.M_POLE(M_POLE)) u_c (
    .clk     (clk),
    .rst_n   (rst_n),
    .valid_i (busy_q),
    .phase_i (phase_q),
    .col_i   (col_q),
    .sym_i   (rt_sym),
    .sym_o   (v_sym)
  );

  module_d u_d (
    .clk          (clk),
    .rst_n        (rst_n),
    .valid_i      (busy_q),
    .phase_i      (phase_q),
    .n_info_i     (l_q),
    .use_aprime_i (aprime_q),
    .sym_i        (bhat_sym),
    .sym_o        (btil_sym)
  );

  module_b u_b (
    .clk          (clk),
    .rst_n        (rst_n),
    .valid_i      (busy_q),
    .first_i      (phase_q == '0),
    .last_i       (last_ph),
    .use_aprime_i (aprime_q),
    .sym_i        (btil_sym),
    .y_o          (b_par),
    .y_valid_o    (b_valid)
  );

  // Output: held information column plus B's parallel result.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_pipe_q      <= '0;
      out_col_idx_o <= '0;
    end else if (last_ph) begin
      x_pipe_q      <= x_hold_q;
      out_col_idx_o <= col_q;
    end
  end

  assign out_valid_o = b_valid;
  assign out_last_o  = int'(out_col_idx_o) == Q2 - 1;
  always_comb begin
    for (int r = 0; r < Q; r++) out_col_o[r] = x_pipe_q[r] ^ b_par[r];
  end

  // On rows fixed by the row codes, r~ written back must equal what they gave.
  a_fixed_rows : assert property (@(posedge clk) disable iff (!rst_n)
                                  (busy_q && fixed_row) |-> (rt_sym == v_sym));

endmodule
