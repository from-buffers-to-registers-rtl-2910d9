// tb_fx_exp2: sweeps the exp2 unit over non-positive Q16.16 inputs from 0 down to -34 and
// compares each result with 2**x computed in floating point. The tolerance is 0.35 %
// relative plus 2 LSB absolute, which the quadratic mantissa approximation must meet.
// Also checks the clamp of positive inputs to 1.0 and the flush to 0 for very negative ones.
module tb_fx_exp2;
  import fa3d_pkg::*;
  fx_t x, y;
  int checks = 0, failures = 0;
  logic clk = 1'b0;

  fx_exp2 dut (.x(x), .y(y));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input fx_t xin);
    real xr, yr, er;
    x = xin;
    #1;
    xr = real'(xin) / 65536.0;
    if (xr > 0.0) xr = 0.0;
    er = $pow(2.0, xr);
    yr = real'(y) / 65536.0;
    checks++;
    if ((yr - er) > er * 0.0035 + 2.0 / 65536.0 || (er - yr) > er * 0.0035 + 2.0 / 65536.0) begin
      failures++;
      $display("FAIL: exp2(%f) = %f, expected %f", xr, yr, er);
    end
  endtask

  initial begin : main
    for (int k = 0; k <= 34 * 64; k++) check(fx_t'(-k * 1024));
    for (int k = 0; k < 2000; k++) check(-fx_t'($urandom % (20 * 65536)));
    check(fx_t'(3 * 65536));
    x = FX_NEG_INF; #1;
    checks++;
    if (y != '0) begin failures++; $display("FAIL: exp2(-inf) = %0d", y); end
    x = '0; #1;
    checks++;
    if (y != FX_ONE) begin failures++; $display("FAIL: exp2(0) = %0d", y); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
