// tb_herm_encoder -- end-to-end test of the Hermitian encoder at its default size.
//
// Streams NCW random information arrays into herm_encoder (defaults: q = 4,
// GF(16), m = 30, the (64, 39) code), some back to back and some with random
// idle gaps on the input, and checks every output codeword independently:
//   * the information symbols come out unchanged in their rows;
//   * every syndrome S_(a,b) = sum c_(beta,alpha) x^a y^b over the q^3 affine
//     points of x^(q+1) = y^q + y is zero for all a*q + b*(q+1) <= m, b < q,
//     with the points built from their closed form and verified on the curve;
//   * column indices, the per-column information count and the handshake;
//   * each column leaves q+1 clocks after it was taken, and a codeword fed
//     back to back takes q^3 clocks from first to last transfer.
// Once, in the middle of a codeword, the encoder is reset; that codeword is
// dropped and sent again, and every later codeword must still be correct.
// It also counts how often each kind of column occurred (only information,
// mixed, only checks, the alpha = 0 column with A'), input stalls and the
// reset, and fails if one never happened.
module tb_herm_encoder;
  import herm_pkg::*;
  import herm_ref_pkg::*;

  localparam int NCW = 24;
  localparam int MP  = M_POLE_DEFAULT;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_ready;
  col_t in_col = '0;
  logic [COLW-1:0] in_col_idx, out_col_idx;
  logic [LW-1:0]   in_n_info;
  logic out_valid, out_last;
  col_t out_col;

  herm_encoder dut (
    .clk(clk), .rst_n(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready),
    .in_col_i(in_col), .in_col_idx_o(in_col_idx), .in_n_info_o(in_n_info),
    .out_valid_o(out_valid), .out_col_o(out_col), .out_col_idx_o(out_col_idx),
    .out_last_o(out_last)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  int n_allinfo = 0, n_mixed = 0, n_allcheck = 0, n_aprime = 0, n_stall = 0, n_b2b = 0;
  int n_cw_done = 0, n_reset = 0;

  gf_t px [Q][Q2];
  gf_t py [Q][Q2];
  int  ninfo_ref [Q2];
  gf_t info [2][Q][Q2];        // double buffer: input and output codewords overlap
  int  in_cw = 0, out_cw = 0;
  gf_t cw [Q][Q2];
  int  acc_cyc [Q2];
  int  exp_in_idx = 0, exp_out_idx = 0, last_acc = -100;
  int  first_acc_cyc, last_acc_cyc;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL at cycle %0d: %s", cyc, what);
    end
  endtask

  // Reference tables: points of the curve and information counts per column.
  initial begin
    gf_t a, b;
    for (int j = 0; j < Q2; j++) begin
      a = (j < Q2 - 1) ? reps(j) : gf_t'(0);
      for (int r = 0; r < Q; r++) begin
        b = rbeta(r);
        px[r][j] = a;
        py[r][j] = rmul(rpow(a, Q + 1), ry0() ^ b) ^ ((a == 0) ? b : gf_t'(0));
      end
      ninfo_ref[j] = 0;
      for (int i = 0; i < Q; i++) if (Q2 - ref_a_hat(MP, i) - 1 > j) ninfo_ref[j]++;
    end
  end

  task automatic check_codeword();
    gf_t s;
    int nz;
    nz = 0;
    for (int j = 0; j < Q2; j++)
      for (int r = 0; r < Q; r++) begin
        if (r < ninfo_ref[j]) check(cw[r][j] == info[out_cw % 2][r][j], $sformatf("info c[%0d][%0d]", r, j));
        if (cw[r][j] != 0) nz++;
      end
    for (int b = 0; b < Q; b++)
      for (int a = 0; a * Q + b * (Q + 1) <= MP; a++) begin
        s = '0;
        for (int j = 0; j < Q2; j++)
          for (int r = 0; r < Q; r++)
            s ^= rmul(cw[r][j], rmul(rpow(px[r][j], a), rpow(py[r][j], b)));
        check(s == 0, $sformatf("syndrome S_%0d,%0d = %0h", a, b, s));
      end
    check(nz > 0, "codeword is all zero");
    n_cw_done++;
  endtask

  // Monitor: handshake, latency, outputs.
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && in_valid && in_ready) begin
      int l;
      check(int'(in_col_idx) == exp_in_idx, "input column index");
      check(int'(in_n_info) == ninfo_ref[exp_in_idx], "input information count");
      for (int r = 0; r < Q; r++) info[in_cw % 2][r][exp_in_idx] = in_col[r];
      acc_cyc[exp_in_idx] = cyc;
      l = Q - ninfo_ref[exp_in_idx];
      if (l == 0) n_allinfo++; else if (l == Q) n_allcheck++; else n_mixed++;
      if (exp_in_idx == Q2 - 1) n_aprime++;
      if (cyc - last_acc == Q) n_b2b++;
      last_acc = cyc;
      if (exp_in_idx == Q2 - 1) in_cw++;
      exp_in_idx = (exp_in_idx + 1) % Q2;
    end
    if (rst_n && !in_valid && in_ready && cyc > 5) n_stall++;
    if (rst_n && out_valid) begin
      check(int'(out_col_idx) == exp_out_idx, "output column index");
      check(cyc - acc_cyc[exp_out_idx] == Q + 1, $sformatf("latency %0d", cyc - acc_cyc[exp_out_idx]));
      check(out_last == (exp_out_idx == Q2 - 1), "last flag");
      for (int r = 0; r < Q; r++) cw[r][exp_out_idx] = out_col[r];
      if (exp_out_idx == Q2 - 1) begin
        check_codeword();
        out_cw++;
      end
      exp_out_idx = (exp_out_idx + 1) % Q2;
    end
  end

  // Driver.
  initial begin
    gf_t p, y;
    // The curve points used by the checker must lie on x^(q+1) = y^q + y.
    for (int j = 0; j < Q2; j++)
      for (int r = 0; r < Q; r++) begin
        p = px[r][j];
        y = py[r][j];
        check(rpow(p, Q + 1) == (rpow(y, Q) ^ y), "point on curve");
      end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < NCW; n++) begin
      if (n == 1) first_acc_cyc = -1;
      for (int j = 0; j < Q2; j++) begin
        // Once, reset in the middle of a codeword: it is dropped and sent again.
        if (n == NCW / 2 && j == 5 && n_reset == 0) begin
          in_valid = 1'b0;
          rst_n = 1'b0;
          repeat (2) @(negedge clk);
          exp_in_idx = 0;
          exp_out_idx = 0;
          last_acc = -100;
          n_reset++;
          rst_n = 1'b1;
          @(negedge clk);
          check(int'(in_col_idx) == 0 && in_ready && !out_valid, "state after reset");
          j = 0;
        end
        if (n % 3 != 0) while ($urandom_range(2) == 0) @(negedge clk);
        in_valid = 1'b1;
        for (int r = 0; r < Q; r++) in_col[r] = gf_t'($urandom);
        while (!in_ready) @(negedge clk);
        if (n == 3 && j == 0) first_acc_cyc = cyc;
        if (n == 3 && j == Q2 - 1) last_acc_cyc = cyc;
        @(negedge clk);
        in_valid = 1'b0;
      end
    end
    repeat (3 * Q) @(negedge clk);
    check(n_cw_done == NCW, $sformatf("codewords out %0d", n_cw_done));
    // Codeword 3 is fed back to back: q^2 columns at q clocks each.
    check(last_acc_cyc - first_acc_cyc == (Q2 - 1) * Q, "throughput of q clocks per column");
    check(n_allinfo > 0, "no information-only column");
    check(n_mixed > 0, "no mixed column");
    check(n_allcheck > 0, "no check-only column");
    check(n_aprime > 0, "no A' column");
    check(n_stall > 0, "no input stall");
    check(n_b2b > 0, "no back-to-back transfer");
    check(n_reset > 0, "no reset during a codeword");
    $display("columns: info-only %0d mixed %0d check-only %0d aprime %0d; stalls %0d back-to-back %0d resets %0d",
             n_allinfo, n_mixed, n_allcheck, n_aprime, n_stall, n_b2b, n_reset);
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
