// tb_module_a -- checks module_a (column times A or A', serial output).
//
// Loads random columns with a random choice of A or A', then reads q output
// symbols on consecutive clocks and compares each with sum_r A[i][r] d[r],
// the matrix entries taken from their closed form ((y0 + beta_r)^i, or
// beta_r^i with 0^0 = 1). Row i must appear exactly i clocks after the load.
// Some trials pause step_i for a few clocks to check that the row is held.
module tb_module_a;
  import herm_pkg::*;
  import herm_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic load = 1'b0, use_ap = 1'b0, step = 1'b0;
  col_t d = '0;
  gf_t  sym;

  module_a dut (.clk(clk), .rst_n(rst_n), .load_i(load), .use_aprime_i(use_ap),
                .d_i(d), .step_i(step), .sym_o(sym));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_ap = 0, n_a = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    col_t dv;
    bit   ap;
    gf_t  exp_v;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 400; n++) begin
      for (int r = 0; r < Q; r++) dv[r] = gf_t'($urandom);
      ap = (n % 3 == 0);
      if (ap) n_ap++; else n_a++;
      load = 1'b1; use_ap = ap; d = dv; step = 1'b0;
      @(negedge clk);
      load = 1'b0; use_ap = 1'b0; d = '0;
      for (int i = 0; i < Q; i++) begin
        exp_v = '0;
        for (int r = 0; r < Q; r++) exp_v ^= rmul(ref_a(i, r, ap), dv[r]);
        check(sym == exp_v, $sformatf("trial %0d row %0d got %0h exp %0h", n, i, sym, exp_v));
        if (n % 5 == 1 && i == 1) begin
          step = 1'b0;
          repeat (2) @(negedge clk);
          check(sym == exp_v, "row held while step is low");
        end
        step = 1'b1;
        @(negedge clk);
        step = 1'b0;
      end
    end
    check(n_ap > 0 && n_a > 0, "both matrices used");
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
