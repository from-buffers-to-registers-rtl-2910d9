// tb_out_norm: feeds random O elements with random row sums l >= 1 into a 4-column
// normaliser, with the "final" flag set at random. Final elements must appear one cycle
// later as o/l (within one LSB of the floating-point quotient); non-final ones must not
// appear at all.
module tb_out_norm;
  import fa3d_pkg::*;
  localparam int D = 4;
  logic clk = 1'b0, rst = 1'b1;
  fx_t  o_i [D], o_l_i [D], y_o [D];
  logic o_v_i [D], o_fin_i [D], y_v_o [D];
  real  expv [D];
  logic expf [D];
  int checks = 0, failures = 0;

  out_norm #(.D(D)) dut (.clk, .rst, .o_i, .o_v_i, .o_l_i, .o_fin_i, .y_o, .y_v_o);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    for (int c = 0; c < D; c++) begin o_i[c] = '0; o_l_i[c] = FX_ONE; o_v_i[c] = 0; o_fin_i[c] = 0; end
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    for (int t = 0; t < 500; t++) begin
      for (int c = 0; c < D; c++) begin
        o_i[c]     = fx_t'(int'($urandom % (16 * 65536)) - 8 * 65536);
        o_l_i[c]   = FX_ONE + fx_t'($urandom % (40 * 65536));
        o_v_i[c]   = 1'($urandom);
        o_fin_i[c] = 1'($urandom);
        expf[c]    = o_v_i[c] && o_fin_i[c];
        expv[c]    = real'(o_i[c]) / real'(o_l_i[c]);
      end
      @(posedge clk);
      #1;
      for (int c = 0; c < D; c++) begin
        real yr;
        checks++;
        yr = real'(y_o[c]) / 65536.0;
        if (y_v_o[c] != expf[c]) begin
          failures++; $display("FAIL: t=%0d col %0d valid %0b expected %0b", t, c, y_v_o[c], expf[c]);
        end else if (expf[c] && ((yr - expv[c]) > 1.5 / 65536.0 || (expv[c] - yr) > 1.5 / 65536.0)) begin
          failures++; $display("FAIL: t=%0d col %0d y=%f expected %f", t, c, yr, expv[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
