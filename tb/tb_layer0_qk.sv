// tb_layer0_qk: tier-0 array (D = 4) fed with three Q/K tile pairs in the skewed pattern,
// one pair every 2*D cycles. Every PE must emit its S element exactly once per tile, in
// cycle base + 2*D*n + i + j + D + 1, with S[i][j] = sum_k Q[i][k] K[j][k] (compared with a
// floating-point dot product) and the tile's iteration tag.
module tb_layer0_qk;
  import fa3d_pkg::*;
  localparam int D = 4;
  localparam int NT = 3;
  localparam int BASE = 5;
  logic      clk = 1'b0, rst = 1'b1;
  fx_t       q_i [D], k_i [D];
  logic      q_v_i [D], q_first_i [D], q_last_i [D];
  iter_tag_t q_tag_i [D];
  fx_t       s_o [D][D];
  logic      s_v_o [D][D];
  iter_tag_t s_tag_o [D][D];
  real       qr [NT][D][D], kr [NT][D][D];
  int        seen [D][D];
  int checks = 0, failures = 0, cyc = 0;

  layer0_qk #(.D(D)) dut (.clk, .rst, .q_i, .q_v_i, .q_first_i, .q_last_i, .q_tag_i, .k_i,
                          .s_o, .s_v_o, .s_tag_o);

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
    int t, n, k;
    // drive
    for (int i = 0; i < D; i++) begin
      t = cyc - BASE - i;
      n = (t >= 0) ? t / (2 * D) : -1;
      k = (t >= 0) ? t % (2 * D) : -1;
      q_v_i[i] = !rst && t >= 0 && n < NT && k < D;
      q_i[i]     = q_v_i[i] ? fx_t'($rtoi(qr[n][i][k] * 65536.0)) : '0;
      q_first_i[i] = q_v_i[i] && k == 0;
      q_last_i[i]  = q_v_i[i] && k == D - 1;
      q_tag_i[i]   = q_v_i[i] ? '{init: (n == 0), fin: (n == NT - 1)} : '0;
      k_i[i]     = q_v_i[i] ? fx_t'($rtoi(kr[n][i][k] * 65536.0)) : '0;
    end
    // check
    if (!rst) begin
      for (int i = 0; i < D; i++) for (int j = 0; j < D; j++) begin
        t = cyc - BASE - i - j - D - 1;
        n = (t >= 0) ? t / (2 * D) : -1;
        checks++;
        if (s_v_o[i][j] != (t >= 0 && t % (2 * D) == 0 && n < NT)) begin
          failures++; $display("FAIL: cycle %0d S(%0d,%0d) valid=%0b", cyc, i, j, s_v_o[i][j]);
        end else if (s_v_o[i][j]) begin
          real ref_s, got;
          ref_s = 0.0;
          for (int kk = 0; kk < D; kk++) ref_s += qr[n][i][kk] * kr[n][j][kk];
          got = real'(s_o[i][j]) / 65536.0;
          seen[i][j]++;
          checks++;
          if (got - ref_s > 0.002 || ref_s - got > 0.002 ||
              s_tag_o[i][j].init != (n == 0) || s_tag_o[i][j].fin != (n == NT - 1)) begin
            failures++; $display("FAIL: S%0d(%0d,%0d) = %f expected %f", n, i, j, got, ref_s);
          end
        end
      end
    end
  end

  initial begin : main
    for (int n = 0; n < NT; n++) for (int i = 0; i < D; i++) for (int k = 0; k < D; k++) begin
      qr[n][i][k] = real'(int'($urandom % 4000) - 2000) / 1000.0;
      kr[n][i][k] = real'(int'($urandom % 4000) - 2000) / 1000.0;
    end
    for (int i = 0; i < D; i++) for (int j = 0; j < D; j++) seen[i][j] = 0;
    repeat (2) @(posedge clk);
    rst = 1'b0;
    repeat (BASE + 2 * D * NT + 3 * D) @(posedge clk);
    for (int i = 0; i < D; i++) for (int j = 0; j < D; j++) begin
      checks++;
      if (seen[i][j] != NT) begin failures++; $display("FAIL: PE(%0d,%0d) emitted %0d", i, j, seen[i][j]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
