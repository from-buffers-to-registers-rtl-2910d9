// tb_layer1_max: tier-1 array (D = 4) receiving three S tiles along anti-diagonals
// (S[i][j] in cycle base + 2*D*n + i + j), the timing tier 0 produces. Checks, exactly:
// the rightmost PE of row i emits a = old_m - new_m in cycle base + 2*D*n + i + D + 1 and
// N one cycle later; PE(i,j), j < D-1, emits N = S - new_m in cycle base + 2*D*n + i + 2*D - j;
// new_m = max(old_m, rowmax S) with old_m = -inf on the first tile (a saturates to -inf).
// Nothing else may appear on the TSV outputs.
module tb_layer1_max;
  import fa3d_pkg::*;
  localparam int D = 4;
  localparam int NT = 3;
  localparam int BASE = 5;
  logic      clk = 1'b0, rst = 1'b1;
  fx_t       s_i [D][D];
  logic      s_v_i [D][D];
  iter_tag_t s_tag_i [D][D];
  fx_t       na_o [D][D];
  logic      na_v_o [D][D], na_is_a_o [D][D];
  iter_tag_t na_tag_o [D][D];
  fx_t       sv [NT][D][D];
  fx_t       newm [NT][D];
  fx_t       am [NT][D];
  int checks = 0, failures = 0, cyc = 0;

  layer1_max #(.D(D)) dut (.clk, .rst, .s_i, .s_v_i, .s_tag_i, .na_o, .na_v_o, .na_is_a_o, .na_tag_o);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    int t, n;
    for (int i = 0; i < D; i++) for (int j = 0; j < D; j++) begin
      t = cyc - BASE - i - j;
      n = (t >= 0) ? t / (2 * D) : -1;
      s_v_i[i][j] = !rst && t >= 0 && t % (2 * D) == 0 && n < NT;
      s_i[i][j]   = s_v_i[i][j] ? sv[n][i][j] : '0;
      s_tag_i[i][j] = s_v_i[i][j] ? '{init: (n == 0), fin: (n == NT - 1)} : '0;
    end
    if (!rst) begin
      for (int i = 0; i < D; i++) for (int j = 0; j < D; j++) begin
        bit exp_v, exp_a;
        fx_t exp_val;
        exp_v = 0; exp_a = 0; exp_val = '0;
        for (int m = 0; m < NT; m++) begin
          int tb0;
          tb0 = cyc - BASE - 2 * D * m - i;
          if (j == D - 1) begin
            if (tb0 == D + 1) begin exp_v = 1; exp_a = 1; exp_val = am[m][i]; end
            if (tb0 == D + 2) begin exp_v = 1; exp_val = sv[m][i][j] - newm[m][i]; end
          end else if (tb0 == 2 * D - j) begin
            exp_v = 1; exp_val = sv[m][i][j] - newm[m][i];
          end
        end
        checks++;
        if (na_v_o[i][j] != exp_v || (exp_v && (na_is_a_o[i][j] != exp_a || na_o[i][j] != exp_val))) begin
          failures++;
          $display("FAIL: cycle %0d PE(%0d,%0d) v=%0b a=%0b val=%0d, expected v=%0b a=%0b val=%0d",
                   cyc, i, j, na_v_o[i][j], na_is_a_o[i][j], na_o[i][j], exp_v, exp_a, exp_val);
        end
      end
    end
  end

  initial begin : main
    for (int n = 0; n < NT; n++) for (int i = 0; i < D; i++) begin
      fx_t mx, oldm;
      mx = FX_NEG_INF;
      for (int j = 0; j < D; j++) begin
        // tiles get a growing offset on some rows so the running maximum changes
        sv[n][i][j] = fx_t'(int'($urandom % (8 * 65536)) - 4 * 65536 + ((i % 2 == 0) ? n * 65536 : 0));
        if (sv[n][i][j] > mx) mx = sv[n][i][j];
      end
      oldm = (n == 0) ? FX_NEG_INF : newm[n-1][i];
      newm[n][i] = (mx > oldm) ? mx : oldm;
      am[n][i] = (n == 0) ? FX_NEG_INF : oldm - newm[n][i];
    end
    repeat (2) @(posedge clk);
    rst = 1'b0;
    repeat (BASE + 2 * D * NT + 4 * D) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
