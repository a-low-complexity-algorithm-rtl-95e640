// tb_module_c -- checks module_c, the bank of row encoders with switches a and b.
//
// Drives the bank the way the encoder does: for each column the row slot
// rotates 0, 1, ..., q-1, one row per clock (with random idle clocks between
// slots). A row in its free part gets a random symbol; afterwards its own
// output is fed back. After q^2 columns every row word must satisfy the
// definition of E_i (information unchanged, a_hat(i) zero sums at
// xi_a = eps^(a + i(q+1)) and the extension check with xi_0).
module tb_module_c;
  import herm_pkg::*;
  import herm_ref_pkg::*;

  localparam int MP = M_POLE_DEFAULT;

  logic clk = 1'b0, rst_n = 1'b0;
  logic valid = 1'b0;
  logic [PHW-1:0]  phase = '0;
  logic [COLW-1:0] col = '0;
  gf_t sin = '0, sout;

  module_c #(.M_POLE(MP)) dut (.clk(clk), .rst_n(rst_n), .valid_i(valid), .phase_i(phase),
                               .col_i(col), .sym_i(sin), .sym_o(sout));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  gf_t w [Q][Q2];
  gf_t inf [Q][Q2];

  initial begin
    int ah, k, nz;
    gf_t s;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 60; n++) begin
      for (int j = 0; j < Q2; j++)
        for (int i = 0; i < Q; i++) begin
          k = Q2 - ref_a_hat(MP, i) - 1;
          if ($urandom_range(4) == 0) begin
            valid = 1'b0;
            @(negedge clk);
          end
          valid = 1'b1; phase = PHW'(i); col = COLW'(j);
          inf[i][j] = gf_t'($urandom);
          sin = inf[i][j];
          #1;
          if (j < k) begin
            w[i][j] = inf[i][j];
            check(sout == 0, "no output in the information part");
          end else begin
            w[i][j] = sout;
            sin = sout;
          end
          @(negedge clk);
          valid = 1'b0;
        end
      for (int i = 0; i < Q; i++) begin
        ah = ref_a_hat(MP, i);
        k  = Q2 - ah - 1;
        nz = 0;
        for (int t = 0; t < k; t++) check(w[i][t] == inf[i][t], "information unchanged");
        for (int t = 0; t < Q2; t++) if (w[i][t] != 0) nz++;
        check(nz > 0, "row word not all zero");
        for (int a = 0; a <= ah; a++) begin
          s = (a == 0) ? w[i][Q2-1] : gf_t'(0);
          for (int t = 0; t < Q2 - 1; t++) s ^= rmul(w[i][t], rpow(reps(a + i * (Q + 1)), t));
          check(s == 0, $sformatf("word %0d row %0d check %0d = %0h", n, i, a, s));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
