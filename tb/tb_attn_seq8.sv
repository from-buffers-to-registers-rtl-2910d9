// tb_attn_seq8: the evaluated workload shape at reduced head size. A 1K-token attention
// head with d = 128 is 8 query tiles by 8 key/value tiles; this test runs the same 8 x 8
// tile loop (64 pipelined inner iterations) on a D = 16 stack, i.e. 128 tokens of a
// d = 16 head, and checks every output element against exact softmax attention, the
// 2*D-cycle iteration rate and the mechanisms listed in tb_flow3d_top.
module tb_attn_seq8;
  import fa3d_pkg::*;

  localparam int D  = 16;
  localparam int TR = 8;
  localparam int TC = 8;
  localparam int NW = 16;
  localparam int LQ = TR * D;
  localparam int LK = TC * D;
  localparam real TOL = 0.02;

  logic          clk = 1'b0;
  logic          rst = 1'b1;
  logic          cfg_we = 1'b0;
  fx_t           cfg_c = '0;
  logic          start = 1'b0;
  logic          busy, done;
  logic          qk_rd, v_rd;
  logic [NW-1:0] qk_k, qk_bi, qk_bj, v_c, v_bi, v_bj;
  fx_t           q_col [D], k_col [D], v_col [D], o_col [D];
  logic          o_col_v [D];

  real qr [LQ][D];
  real kr [LK][D];
  real vr [LK][D];
  fx_t qf [LQ][D];
  fx_t kf [LK][D];
  fx_t vf [LK][D];
  real got [TR][D][D];
  int  ocnt [D];

  int checks = 0, failures = 0;
  int cyc = 0;
  int last_qk_first = -1;
  int n_overlap = 0, n_rescale = 0, n_restart = 0, n_norm = 0;
  int blk_first_out [TR];

  flow3d_top #(.D(D), .NW(NW)) dut (
    .clk, .rst, .cfg_we, .cfg_c, .start, .tr(NW'(TR)), .tc(NW'(TC)), .busy, .done,
    .qk_rd, .qk_k, .qk_bi, .qk_bj, .q_col, .k_col,
    .v_rd, .v_c, .v_bi, .v_bj, .v_col,
    .o_col, .o_col_v
  );

  always #5 clk = ~clk;

  function automatic real rnd();
    return (real'($urandom % 2000) - 1000.0) / 1000.0;
  endfunction
  function automatic fx_t to_fx(real r);
    return fx_t'($rtoi(r * 65536.0));
  endfunction
  function automatic real from_fx(fx_t x);
    return real'(x) / 65536.0;
  endfunction

  // behavioural tile buffer: same-cycle column reads
  always_comb begin
    for (int i = 0; i < D; i++) begin
      q_col[i] = qf[(int'(qk_bi) * D + i) % LQ][int'(qk_k) % D];
      k_col[i] = kf[(int'(qk_bj) * D + i) % LK][int'(qk_k) % D];
      v_col[i] = vf[(int'(v_bj) * D + i) % LK][int'(v_c) % D];
    end
  end

  // schedule and mechanism monitors
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst && qk_rd && qk_k == '0) begin
      if (last_qk_first >= 0) begin
        checks++;
        if (cyc - last_qk_first != 2 * D) begin
          failures++;
          $display("FAIL: Q/K tiles %0d cycles apart, expected %0d", cyc - last_qk_first, 2 * D);
        end
      end
      last_qk_first <= cyc;
      // an older iteration still occupies the upper tiers while a new one enters tier 0
      if (dut.u_ctrl.v_busy || dut.u_ctrl.wait_v) n_overlap++;
    end
    for (int i = 0; i < D; i++) begin
      if (!rst && dut.bl_v[i]) begin
        if (dut.bl_t[i].init) n_restart++;
        else if (dut.bl_b[i] != FX_ONE && dut.bl_b[i] != '0) n_rescale++;
      end
    end
    for (int c = 0; c < D; c++) begin
      if (!rst && o_col_v[c]) begin
        int blk, x;
        blk = ocnt[c] / D;
        x   = ocnt[c] % D;
        if (blk < TR) begin
          got[blk][c][x] = from_fx(o_col[c]);
          if (c == 0 && x == 0) blk_first_out[blk] = cyc;
        end
        ocnt[c] <= ocnt[c] + 1;
        n_norm++;
      end
    end
  end

  initial begin : watchdog
    repeat (200 * D * TC * TR + 2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    real sc, ref_o, mx, den, e;
    real sv [LK];
    for (int c = 0; c < D; c++) ocnt[c] = 0;
    for (int r = 0; r < LQ; r++) for (int k = 0; k < D; k++) begin
      qr[r][k] = rnd(); qf[r][k] = to_fx(qr[r][k]);
    end
    for (int r = 0; r < LK; r++) for (int k = 0; k < D; k++) begin
      // later key blocks get larger scores so the running maximum grows
      kr[r][k] = rnd() * (1.0 + real'(r / D)); kf[r][k] = to_fx(kr[r][k]);
      vr[r][k] = rnd(); vf[r][k] = to_fx(vr[r][k]);
    end
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    cfg_we <= 1'b1;
    cfg_c  <= to_fx(1.4426950408889634 / $sqrt(real'(D)));
    @(posedge clk);
    cfg_we <= 1'b0;
    start  <= 1'b1;
    @(posedge clk);
    start  <= 1'b0;
    wait (ocnt[D-1] == TR * D);
    repeat (5) @(posedge clk);
    // reference: exact attention
    sc = 1.0 / $sqrt(real'(D));
    for (int qi = 0; qi < LQ; qi++) begin
      mx = -1.0e30;
      for (int j = 0; j < LK; j++) begin
        sv[j] = 0.0;
        for (int k = 0; k < D; k++) sv[j] += qr[qi][k] * kr[j][k];
        sv[j] *= sc;
        if (sv[j] > mx) mx = sv[j];
      end
      den = 0.0;
      for (int j = 0; j < LK; j++) den += $exp(sv[j] - mx);
      for (int x = 0; x < D; x++) begin
        ref_o = 0.0;
        for (int j = 0; j < LK; j++) begin
          e = $exp(sv[j] - mx);
          ref_o += e * vr[j][x];
        end
        ref_o /= den;
        checks++;
        if ((got[qi / D][qi % D][x] - ref_o) > TOL || (ref_o - got[qi / D][qi % D][x]) > TOL) begin
          failures++;
          $display("FAIL: O[%0d][%0d] = %f, expected %f", qi, x, got[qi / D][qi % D][x], ref_o);
        end
      end
    end
    // steady-state rate: outer blocks finish TC iterations of 2*D cycles apart
    for (int b = 1; b < TR; b++) begin
      checks++;
      if (blk_first_out[b] - blk_first_out[b-1] != TC * 2 * D) begin
        failures++;
        $display("FAIL: outer blocks finished %0d cycles apart, expected %0d",
                 blk_first_out[b] - blk_first_out[b-1], TC * 2 * D);
      end
    end
    $display("mechanisms: overlap=%0d rescale=%0d restart=%0d normalised=%0d latency(first out)=%0d",
             n_overlap, n_rescale, n_restart, n_norm, blk_first_out[0]);
    checks += 4;
    if (n_overlap == 0) begin failures++; $display("FAIL: no overlapped iterations"); end
    if (n_rescale == 0) begin failures++; $display("FAIL: no running-max rescale"); end
    if (n_restart == 0) begin failures++; $display("FAIL: no outer-block restart"); end
    if (n_norm == 0)    begin failures++; $display("FAIL: no normalised output"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
