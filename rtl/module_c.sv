// module_c -- bank of q row-code encoders with the rotating switches a and b (Module C).
//
// Holds one ec_encoder per row i = 0..q-1 of r~; encoder i serves the code E_i,
// whose rate differs from row to row (a_hat(i) + 1 checks). Switch a steers the
// input symbol to encoder `phase_i` and switch b picks that encoder's output, so
// both rotate by one row every clock, as drawn in the paper's block diagram.
// Each encoder therefore acts once every q clocks, i.e. at 1/q of the clock rate.
//
// Interface: valid_i qualifies a slot; phase_i is the row served in this clock
// and col_i the column (codeword position of every row code). sym_o is
// combinational: the parity or extension symbol of row phase_i at column col_i,
// or 0 while that row is still in its information part. sym_i is written into
// encoder phase_i at the clock edge.
module module_c
  import herm_pkg::*;
#(
  parameter int M_POLE = M_POLE_DEFAULT
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            valid_i,
  input  logic [PHW-1:0]  phase_i,
  input  logic [COLW-1:0] col_i,
  input  gf_t             sym_i,
  output gf_t             sym_o
);

  gf_t [Q-1:0] enc_out;

  for (genvar r = 0; r < Q; r++) begin : g_row
    ec_encoder #(.ROW(r), .M_POLE(M_POLE)) u_enc (
      .clk   (clk),
      .rst_n (rst_n),
      .en_i  (valid_i && (phase_i == PHW'(r))),   // switch a
      .col_i (col_i),
      .sym_i (sym_i),
      .sym_o (enc_out[r])
    );
  end

  assign sym_o = enc_out[phase_i];                  // switch b

endmodule
