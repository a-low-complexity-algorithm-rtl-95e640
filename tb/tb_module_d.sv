// tb_module_d -- checks module_d, the systematic encoder of the column codes D_l.
//
// For every l = 0..q and both matrices, random first-l symbols are fed one per
// clock; the full output column b~ must repeat them on rows < l and satisfy the
// first q - l parity checks, i.e. rows 0..q-l-1 of A^-1 b~ (or A'^-1 b~) are
// zero, with the inverse entries written out as in Lemma 3.
module tb_module_d;
  import herm_pkg::*;
  import herm_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic valid = 1'b0, use_ap = 1'b0;
  logic [PHW-1:0] phase = '0;
  logic [LW-1:0]  ninfo = '0;
  gf_t sin = '0, sout;

  module_d dut (.clk(clk), .rst_n(rst_n), .valid_i(valid), .phase_i(phase), .n_info_i(ninfo),
                .use_aprime_i(use_ap), .sym_i(sin), .sym_o(sout));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    col_t in, out;
    gf_t s;
    int l, nz;
    bit ap;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 600; n++) begin
      l  = n % (Q + 1);
      ap = (n / (Q + 1)) % 2;
      ninfo = LW'(l); use_ap = ap;
      for (int i = 0; i < Q; i++) begin
        in[i] = gf_t'($urandom);
        valid = 1'b1; phase = PHW'(i); sin = in[i];
        #1;
        out[i] = sout;
        @(negedge clk);
        valid = 1'b0;
        if ($urandom_range(3) == 0) @(negedge clk);
      end
      nz = 0;
      for (int i = 0; i < l; i++) check(out[i] == in[i], $sformatf("l=%0d row %0d passes", l, i));
      for (int i = 0; i < l; i++) if (in[i] != 0) nz++;
      if (nz > 0) check(out != '0, "column not all zero");
      for (int r = 0; r < Q - l; r++) begin
        s = '0;
        for (int t = 0; t < Q; t++) s ^= rmul(ref_ainv(r, t, ap), out[t]);
        check(s == 0, $sformatf("l=%0d ap=%0d check row %0d = %0h", l, ap, r, s));
      end
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
