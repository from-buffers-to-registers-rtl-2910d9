// tb_fa3d_ctrl: runs the controller for TR = 2 outer and TC = 3 inner blocks with D = 4 and
// checks the whole read schedule cycle by cycle against a schedule computed here:
// Q/K column k of iteration n is read in cycle S + 1 + 2*D*n + k (S = start cycle), with
// block indices (n / TC, n % TC), first/last-column flags and init/fin tags; the V column
// c of iteration n is read exactly V_OFF cycles after the matching Q/K read. It also checks
// that nothing is read in any other cycle, that busy covers the run and that done pulses
// once after the last V read.
module tb_fa3d_ctrl;
  localparam int D     = 4;
  localparam int NW    = 16;
  localparam int TR    = 2;
  localparam int TC    = 3;
  localparam int V_OFF = 3 * D + 3;
  localparam int NIT   = TR * TC;

  logic          clk = 1'b0, rst = 1'b1, start = 1'b0;
  logic          busy, done, qk_rd, v_rd, qk_first, qk_last, qk_init, qk_fin, v_first;
  logic [NW-1:0] qk_k, qk_bi, qk_bj, v_c, v_bi, v_bj;
  int checks = 0, failures = 0;
  int cyc = 0, s_cyc = -1, n_done = 0, last_v = -1;

  fa3d_ctrl #(.D(D), .NW(NW), .V_OFF(V_OFF)) dut (
    .clk, .rst, .start, .tr(NW'(TR)), .tc(NW'(TC)), .busy, .done,
    .qk_rd, .qk_k, .qk_bi, .qk_bj, .qk_first, .qk_last, .qk_init, .qk_fin,
    .v_rd, .v_c, .v_bi, .v_bj, .v_first
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: cycle %0d: %s", cyc, what);
    end
  endfunction

  // expected schedule, relative to the first Q/K read
  always @(negedge clk) begin
    if (!rst && s_cyc >= 0) begin
      int t, n, k;
      bit exp_qk, exp_v;
      t = cyc - s_cyc - 1;
      n = (t >= 0) ? t / (2 * D) : -1;
      k = (t >= 0) ? t % (2 * D) : -1;
      exp_qk = (t >= 0) && (n < NIT) && (k < D);
      chk(qk_rd == exp_qk, "qk_rd");
      if (exp_qk) begin
        chk(int'(qk_k) == k, "qk_k");
        chk(int'(qk_bi) == n / TC && int'(qk_bj) == n % TC, "qk block");
        chk(qk_first == (k == 0) && qk_last == (k == D - 1), "qk first/last");
        chk(qk_init == (n % TC == 0) && qk_fin == (n % TC == TC - 1), "qk tags");
      end
      t = t - V_OFF;
      n = (t >= 0) ? t / (2 * D) : -1;
      k = (t >= 0) ? t % (2 * D) : -1;
      exp_v = (t >= 0) && (n < NIT) && (k < D);
      chk(v_rd == exp_v, "v_rd");
      if (exp_v) begin
        chk(int'(v_c) == k && v_first == (k == 0), "v_c/v_first");
        chk(int'(v_bi) == n / TC && int'(v_bj) == n % TC, "v block");
        last_v = cyc;
      end
      if (t + V_OFF >= 0 && t < 2 * D * NIT - D) chk(busy, "busy");
      if (done) n_done++;
    end
  end

  always @(posedge clk) cyc <= cyc + 1;

  initial begin : main
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    @(posedge clk);
    #1 start = 1'b1;
    s_cyc = cyc;
    @(posedge clk);
    #1 start = 1'b0;
    wait (s_cyc >= 0 && cyc > s_cyc + V_OFF + 2 * D * NIT + 10);
    chk(n_done == 1, "done pulsed once");
    chk(!busy, "idle at the end");
    chk(last_v > 0, "V reads seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
