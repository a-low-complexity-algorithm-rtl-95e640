// tb_ec_encoder -- checks ec_encoder, one instance per row code E_0 .. E_(q-1).
//
// Each instance receives random symbols at its free positions t < k_i, with
// random idle clocks (en_i low) in between, and its own outputs afterwards. The
// q^2-symbol word read out is checked against the definition of E_i:
// information symbols unchanged, sum_(t<q^2-1) w_t xi_a^t = 0 for a = 1..a_hat(i)
// and w_(q^2-1) + sum_(t<q^2-1) w_t xi_0^t = 0 with xi_a = eps^(a + i(q+1)), and
// the row lengths k_i = q^2 - a_hat(i) - 1 from floor((m - i(q+1)) / q).
module tb_ec_encoder;
  import herm_pkg::*;
  import herm_ref_pkg::*;

  localparam int MP = M_POLE_DEFAULT;
  localparam int NW = 60;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, done = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic check_word(int row, gf_t w [Q2], gf_t inf [Q2]);
    int ah, k, nz;
    gf_t s;
    ah = ref_a_hat(MP, row);
    k  = Q2 - ah - 1;
    nz = 0;
    for (int t = 0; t < k; t++) check(w[t] == inf[t], $sformatf("row %0d info %0d", row, t));
    for (int t = 0; t < Q2; t++) if (w[t] != 0) nz++;
    check(nz > 0, "word not all zero");
    for (int a = 0; a <= ah; a++) begin
      s = (a == 0) ? w[Q2-1] : gf_t'(0);
      for (int t = 0; t < Q2 - 1; t++) s ^= rmul(w[t], rpow(reps(a + row * (Q + 1)), t));
      check(s == 0, $sformatf("row %0d check %0d = %0h", row, a, s));
    end
  endtask

  for (genvar r = 0; r < Q; r++) begin : g_row
    logic en = 1'b0;
    logic [COLW-1:0] col = '0;
    gf_t sin = '0, sout;

    ec_encoder #(.ROW(r), .M_POLE(MP)) dut (.clk(clk), .rst_n(rst_n), .en_i(en),
                                           .col_i(col), .sym_i(sin), .sym_o(sout));

    initial begin
      gf_t w [Q2];
      gf_t inf [Q2];
      int k;
      k = Q2 - ref_a_hat(MP, r) - 1;
      check(k == Q2 - (MP - r * (Q + 1)) / Q - 1, "row length");
      wait (rst_n);
      @(negedge clk);
      for (int n = 0; n < NW; n++) begin
        for (int t = 0; t < Q2; t++) begin
          while ($urandom_range(3) == 0) begin
            en = 1'b0;
            @(negedge clk);
          end
          col = COLW'(t);
          inf[t] = gf_t'($urandom);
          sin = (t < k) ? inf[t] : gf_t'($urandom);   // ignored past k_i
          #1;
          if (t < k) begin
            w[t] = inf[t];
            check(sout == 0, "no output in the information part");
          end else w[t] = sout;
          en = 1'b1;
          @(negedge clk);
          en = 1'b0;
        end
        check_word(r, w, inf);
      end
      done++;
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    wait (done == Q);
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
