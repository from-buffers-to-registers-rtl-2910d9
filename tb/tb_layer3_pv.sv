// tb_layer3_pv: tier-3 array (D = 4) run through three iterations. In each, every PE gets
// its P element over the TSV inputs (P[c][r] for array row r, column c), every column gets
// {b, l, tag} from below, and V enters skewed from the left. Column c must then emit from
// its top D consecutive elements new_O[c][x] = b[c]*old_O[c][x] + sum_r P[c][r] V[r][x]
// (old_O = 0 in the first iteration), each with l[c] and the fin flag, compared with a
// floating-point model (tolerance 0.003).
module tb_layer3_pv;
  import fa3d_pkg::*;
  localparam int D = 4;
  localparam int NT = 3;
  localparam int GAP = 8 * D;
  logic      clk = 1'b0, rst = 1'b1;
  fx_t       p_i [D][D];
  logic      p_v_i [D][D];
  fx_t       bl_b_i [D], bl_l_i [D];
  logic      bl_v_i [D];
  iter_tag_t bl_tag_i [D];
  fx_t       v_i [D];
  logic      v_v_i [D], v_first_i [D];
  fx_t       o_o [D], o_l_o [D];
  logic      o_v_o [D], o_fin_o [D];
  real       pr [NT][D][D], vr [NT][D][D], br [NT][D], lr [NT][D];
  real       oref [NT][D][D];
  int        ocnt [D];
  int checks = 0, failures = 0, cyc = 0;

  layer3_pv #(.D(D)) dut (.clk, .rst, .p_i, .p_v_i, .bl_b_i, .bl_l_i, .bl_v_i, .bl_tag_i,
                          .v_i, .v_v_i, .v_first_i, .o_o, .o_v_o, .o_l_o, .o_fin_o);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fx_t fx(real r);
    return fx_t'($rtoi(r * 65536.0));
  endfunction

  // drive: iteration m starts at cycle 10 + GAP*m
  always @(negedge clk) begin
    for (int a = 0; a < D; a++) begin
      bl_v_i[a] = 1'b0; bl_b_i[a] = '0; bl_l_i[a] = '0; bl_tag_i[a] = '0;
      v_v_i[a] = 1'b0; v_first_i[a] = 1'b0; v_i[a] = '0;
      for (int b = 0; b < D; b++) begin p_v_i[a][b] = 1'b0; p_i[a][b] = '0; end
    end
    for (int m = 0; m < NT; m++) begin
      int t;
      t = cyc - 10 - GAP * m;
      if (t == 0) for (int c = 0; c < D; c++) begin
        for (int r = 0; r < D; r++) begin p_v_i[c][r] = 1'b1; p_i[c][r] = fx(pr[m][c][r]); end
        bl_v_i[c] = 1'b1; bl_b_i[c] = fx(br[m][c]); bl_l_i[c] = fx(lr[m][c]);
        bl_tag_i[c] = '{init: (m == 0), fin: (m == NT - 1)};
      end
      for (int r = 0; r < D; r++) begin
        int x;
        x = t - 2 - r;
        if (x >= 0 && x < D) begin
          v_v_i[r] = 1'b1; v_first_i[r] = (x == 0); v_i[r] = fx(vr[m][r][x]);
        end
      end
    end
  end

  always @(posedge clk) if (!rst) begin
    for (int c = 0; c < D; c++) if (o_v_o[c]) begin
      int m, x;
      real got;
      m = ocnt[c] / D; x = ocnt[c] % D;
      got = real'(o_o[c]) / 65536.0;
      checks++;
      if (m >= NT || got - oref[m][c][x] > 0.003 || oref[m][c][x] - got > 0.003 ||
          o_l_o[c] != fx(lr[m][c]) || o_fin_o[c] != (m == NT - 1)) begin
        failures++;
        $display("FAIL: it %0d O[%0d][%0d] = %f expected %f", m, c, x, got, oref[m][c][x]);
      end
      ocnt[c] <= ocnt[c] + 1;
    end
  end

  initial begin : main
    for (int m = 0; m < NT; m++) for (int c = 0; c < D; c++) begin
      br[m][c] = (m == 0) ? 0.0 : real'($urandom % 1000) / 1000.0;
      lr[m][c] = 1.0 + real'($urandom % 4000) / 1000.0;
      for (int r = 0; r < D; r++) begin
        pr[m][c][r] = real'($urandom % 1000) / 1000.0;
        vr[m][c][r] = real'(int'($urandom % 2000) - 1000) / 1000.0;
      end
    end
    for (int m = 0; m < NT; m++) for (int c = 0; c < D; c++) for (int x = 0; x < D; x++) begin
      real acc;
      acc = (m == 0) ? 0.0 : br[m][c] * oref[m-1][c][x];
      for (int r = 0; r < D; r++) acc += pr[m][c][r] * vr[m][r][x];
      oref[m][c][x] = acc;
    end
    for (int c = 0; c < D; c++) ocnt[c] = 0;
    repeat (2) @(posedge clk);
    rst = 1'b0;
    repeat (10 + GAP * NT + 2 * D) @(posedge clk);
    for (int c = 0; c < D; c++) begin
      checks++;
      if (ocnt[c] != NT * D) begin failures++; $display("FAIL: column %0d emitted %0d", c, ocnt[c]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
