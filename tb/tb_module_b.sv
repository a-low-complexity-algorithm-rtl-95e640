// tb_module_b -- checks module_b (serial column times A^-1 or A'^-1).
//
// Feeds random columns serially (one symbol per clock, with occasional idle
// clocks between symbols) and compares the parallel result with the product
// by the inverse matrices written out as in Lemma 3. The result must appear,
// with y_valid_o high for exactly one clock, one clock after the last symbol.
// A second check feeds A times a random vector (entries from their closed
// form) and expects the vector back, so the two matrices are inverse.
module tb_module_b;
  import herm_pkg::*;
  import herm_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic valid = 1'b0, first = 1'b0, last = 1'b0, use_ap = 1'b0;
  gf_t  sym = '0;
  col_t y;
  logic y_valid;

  module_b dut (.clk(clk), .rst_n(rst_n), .valid_i(valid), .first_i(first), .last_i(last),
                .use_aprime_i(use_ap), .sym_i(sym), .y_o(y), .y_valid_o(y_valid));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic run(col_t v, bit ap, col_t exp_y, bit gaps);
    use_ap = ap;
    for (int i = 0; i < Q; i++) begin
      if (gaps && $urandom_range(3) == 0) begin
        valid = 1'b0;
        @(negedge clk);
        check(!y_valid, "no result while idle");
      end
      valid = 1'b1; first = (i == 0); last = (i == Q - 1); sym = v[i];
      @(negedge clk);
      if (i < Q - 1) check(!y_valid, "no early result");
    end
    valid = 1'b0; first = 1'b0; last = 1'b0;
    check(y_valid, "result valid one clock after the last symbol");
    check(y == exp_y, $sformatf("result %0h exp %0h", y, exp_y));
    @(negedge clk);
    check(!y_valid, "valid lasts one clock");
    check(y == exp_y, "result held");
  endtask

  initial begin
    col_t v, e, x;
    bit ap;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 300; n++) begin
      ap = (n % 4 == 3);
      for (int r = 0; r < Q; r++) v[r] = gf_t'($urandom);
      for (int r = 0; r < Q; r++) begin
        e[r] = '0;
        for (int t = 0; t < Q; t++) e[r] ^= rmul(ref_ainv(r, t, ap), v[t]);
      end
      run(v, ap, e, n % 2 == 1);
      // Round trip: A x in, x out.
      for (int r = 0; r < Q; r++) x[r] = gf_t'($urandom);
      for (int i = 0; i < Q; i++) begin
        v[i] = '0;
        for (int r = 0; r < Q; r++) v[i] ^= rmul(ref_a(i, r, ap), x[r]);
      end
      run(v, ap, x, 1'b0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
