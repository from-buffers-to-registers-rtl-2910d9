// tb_layer2_exp: tier-2 array (D = 4) receiving three iterations of a and N with the
// timing tier 1 produces (relative to the iteration: a[i] in cycle i, N[i][D-1] in i+1,
// N[i][j] in i+D-1-j for j < D-1, iterations 2*D apart). Checks against floating point:
// P[i][j] = exp(N/sqrt D) one cycle after N arrives (0.5 % + 4 LSB), and per row, in cycle
// i + 2*D of each iteration, b = exp(a/sqrt D) and new_l = old_l*b + sum_j P[i][j]
// (old_l = 0 on the first iteration), with the iteration tag. Nothing else may appear.
module tb_layer2_exp;
  import fa3d_pkg::*;
  localparam int D = 4;
  localparam int NT = 3;
  localparam int BASE = 5;
  logic      clk = 1'b0, rst = 1'b1, c_we = 1'b0;
  fx_t       c_i = '0;
  fx_t       na_i [D][D];
  logic      na_v_i [D][D], na_is_a_i [D][D];
  iter_tag_t na_tag_i [D][D];
  fx_t       p_o [D][D];
  logic      p_v_o [D][D];
  fx_t       bl_b_o [D], bl_l_o [D];
  logic      bl_v_o [D];
  iter_tag_t bl_tag_o [D];
  fx_t       nv [NT][D][D];
  fx_t       av [NT][D];
  real       lref [NT][D];
  real       sc;
  int checks = 0, failures = 0, cyc = 0;

  layer2_exp #(.D(D)) dut (.clk, .rst, .c_we, .c_i, .na_i, .na_v_i, .na_is_a_i, .na_tag_i,
                           .p_o, .p_v_o, .bl_b_o, .bl_l_o, .bl_v_o, .bl_tag_o);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real ex(fx_t x);
    if (x == FX_NEG_INF) return 0.0;
    return $exp(real'(x) / 65536.0 * sc);
  endfunction

  function automatic bit near(real got, real want, real rel);
    return (got - want) <= want * rel + 4.0 / 65536.0 && (want - got) <= want * rel + 4.0 / 65536.0;
  endfunction

  always @(negedge clk) begin
    for (int i = 0; i < D; i++) for (int j = 0; j < D; j++) begin
      na_v_i[i][j] = 1'b0; na_is_a_i[i][j] = 1'b0; na_i[i][j] = '0; na_tag_i[i][j] = '0;
    end
    if (!rst) begin
      for (int m = 0; m < NT; m++) begin
        int t;
        t = cyc - BASE - 2 * D * m;
        for (int i = 0; i < D; i++) for (int j = 0; j < D; j++) begin
          bit hit_a, hit_n;
          hit_a = (j == D - 1) && t == i;
          hit_n = (j == D - 1) ? (t == i + 1) : (t == i + D - 1 - j);
          if (hit_a || hit_n) begin
            na_v_i[i][j] = 1'b1; na_is_a_i[i][j] = hit_a;
            na_i[i][j] = hit_a ? av[m][i] : nv[m][i][j];
            na_tag_i[i][j] = '{init: (m == 0), fin: (m == NT - 1)};
          end
          // P one cycle after N
          if ((j == D - 1) ? (t == i + 2) : (t == i + D - j)) begin
            checks++;
            if (!p_v_o[i][j] || !near(real'(p_o[i][j]) / 65536.0, ex(nv[m][i][j]), 0.005)) begin
              failures++;
              $display("FAIL: it %0d P(%0d,%0d) v=%0b %f expected %f", m, i, j, p_v_o[i][j],
                       real'(p_o[i][j]) / 65536.0, ex(nv[m][i][j]));
            end
          end
        end
        for (int i = 0; i < D; i++) if (t == i + 2 * D) begin
          checks++;
          if (!bl_v_o[i] || !near(real'(bl_b_o[i]) / 65536.0, ex(av[m][i]), 0.005) ||
              !near(real'(bl_l_o[i]) / 65536.0, lref[m][i], 0.01) ||
              bl_tag_o[i].init != (m == 0) || bl_tag_o[i].fin != (m == NT - 1)) begin
            failures++;
            $display("FAIL: it %0d row %0d bl v=%0b b=%f l=%f expected b=%f l=%f", m, i, bl_v_o[i],
                     real'(bl_b_o[i]) / 65536.0, real'(bl_l_o[i]) / 65536.0, ex(av[m][i]), lref[m][i]);
          end
        end
      end
      // count all valid outputs: must be exactly D*D P and D bl per iteration
    end
  end

  int np = 0, nb = 0;
  always @(posedge clk) if (!rst) begin
    for (int i = 0; i < D; i++) begin
      if (bl_v_o[i]) nb++;
      for (int j = 0; j < D; j++) if (p_v_o[i][j]) np++;
    end
  end

  initial begin : main
    sc = 1.0 / $sqrt(real'(D));
    for (int m = 0; m < NT; m++) for (int i = 0; i < D; i++) begin
      real sum;
      sum = 0.0;
      av[m][i] = (m == 0) ? FX_NEG_INF : -fx_t'($urandom % (3 * 65536));
      for (int j = 0; j < D; j++) begin
        nv[m][i][j] = -fx_t'($urandom % (6 * 65536));
        if (j == i) nv[m][i][j] = '0;   // the row maximum itself
        sum += ex(nv[m][i][j]);
      end
      lref[m][i] = (m == 0) ? sum : lref[m-1][i] * ex(av[m][i]) + sum;
    end
    repeat (2) @(posedge clk);
    rst <= 1'b0;
    c_we <= 1'b1;
    c_i <= fx_t'($rtoi(1.4426950408889634 * sc * 65536.0));
    @(posedge clk);
    c_we <= 1'b0;
    repeat (BASE + 2 * D * NT + 4 * D) @(posedge clk);
    checks += 2;
    if (np != NT * D * D) begin failures++; $display("FAIL: %0d P outputs", np); end
    if (nb != NT * D) begin failures++; $display("FAIL: %0d bl outputs", nb); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
