// flow3d_top: one 3D-Flow stack, four D x D PE tiers running 3D-FlashAttention for one head.
//
// Tier 0 computes S = Q K^T, tier 1 the row maximum and N = S - new_m, a = old_m - new_m,
// tier 2 P = exp(N/sqrt d), b = exp(a/sqrt d), the row sum and new_l, tier 3 local_O = P V
// and new_O = diag(b) old_O + local_O. Each tier hands its results to the tier above
// through per-PE TSV registers, with no buffer in between. The controller starts one
// inner iteration (one K/V tile against the current Q tile) every 2d cycles, so up to
// three iterations are in flight in different tiers. After the last inner iteration of an
// outer block the final O rows leave the top of tier 3 and are divided by l.
//
// Memory side: the on-chip buffer holding the tiles is outside this module. In every cycle
// with qk_rd high the buffer must present column qk_k of Q tile qk_bi on q_col (q_col[i] =
// Q[i][qk_k]) and column qk_k of K tile qk_bj on k_col (k_col[j] = K[j][qk_k]) in the same
// cycle; likewise v_col[r] = V[r][v_c] of V tile v_bj when v_rd is high. Three skew
// buffers turn these vectors into the parallelogram input pattern.
// Output: o_col[c] is element x of row c of the normalised O tile; column c emits its row
// x = 0..D-1 on consecutive cycles marked by o_col_v[c], column c+1 one cycle after c.
// The constant log2(e)/sqrt(d) is written into tier 2 with cfg_we/cfg_c before start.
// All numbers are Q16.16 (see fa3d_pkg).
module flow3d_top
  import fa3d_pkg::*;
#(
  parameter int D  = 128,
  parameter int NW = 16
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          cfg_we,
  input  fx_t           cfg_c,
  input  logic          start,
  input  logic [NW-1:0] tr,
  input  logic [NW-1:0] tc,
  output logic          busy,
  output logic          done,
  // on-chip buffer read side
  output logic          qk_rd,
  output logic [NW-1:0] qk_k,
  output logic [NW-1:0] qk_bi,
  output logic [NW-1:0] qk_bj,
  input  fx_t           q_col   [D],
  input  fx_t           k_col   [D],
  output logic          v_rd,
  output logic [NW-1:0] v_c,
  output logic [NW-1:0] v_bi,
  output logic [NW-1:0] v_bj,
  input  fx_t           v_col   [D],
  // normalised attention output
  output fx_t           o_col   [D],
  output logic          o_col_v [D]
);
  localparam int QW = FX_W + 5;
  localparam int VW = FX_W + 2;

  logic qk_first, qk_last, qk_init, qk_fin, v_first;

  fa3d_ctrl #(.D(D), .NW(NW)) u_ctrl (
    .clk, .rst, .start, .tr, .tc, .busy, .done,
    .qk_rd, .qk_k, .qk_bi, .qk_bj, .qk_first, .qk_last, .qk_init, .qk_fin,
    .v_rd, .v_c, .v_bi, .v_bj, .v_first
  );

  // ---- parallelogram feeders ----
  logic [QW-1:0]   qs_i [D], qs_o [D];
  logic [FX_W-1:0] ks_i [D], ks_o [D];
  logic [VW-1:0]   vs_i [D], vs_o [D];

  fx_t       l0_q  [D];
  logic      l0_qv [D], l0_qf [D], l0_ql [D];
  iter_tag_t l0_qt [D];
  fx_t       l0_k  [D];
  fx_t       l3_v  [D];
  logic      l3_vv [D], l3_vf [D];

  for (genvar r = 0; r < D; r++) begin : g_feed
    assign qs_i[r] = {qk_init, qk_fin, qk_first, qk_last, qk_rd, q_col[r]};
    assign ks_i[r] = k_col[r];
    assign vs_i[r] = {v_first, v_rd, v_col[r]};
    assign {l0_qt[r], l0_qf[r], l0_ql[r], l0_qv[r], l0_q[r]} = qs_o[r];
    assign l0_k[r] = ks_o[r];
    assign {l3_vf[r], l3_vv[r], l3_v[r]} = vs_o[r];
  end

  skew_buffer #(.D(D), .DW(QW))   u_skew_q (.clk, .rst, .d_i(qs_i), .d_o(qs_o));
  skew_buffer #(.D(D), .DW(FX_W)) u_skew_k (.clk, .rst, .d_i(ks_i), .d_o(ks_o));
  skew_buffer #(.D(D), .DW(VW))   u_skew_v (.clk, .rst, .d_i(vs_i), .d_o(vs_o));

  // ---- tier 0: S = Q K^T ----
  fx_t       s    [D][D];
  logic      s_v  [D][D];
  iter_tag_t s_t  [D][D];

  layer0_qk #(.D(D)) u_l0 (
    .clk, .rst,
    .q_i(l0_q), .q_v_i(l0_qv), .q_first_i(l0_qf), .q_last_i(l0_ql), .q_tag_i(l0_qt),
    .k_i(l0_k),
    .s_o(s), .s_v_o(s_v), .s_tag_o(s_t)
  );

  // ---- tier 1: row max, N, a ----
  fx_t       na    [D][D];
  logic      na_v  [D][D];
  logic      na_a  [D][D];
  iter_tag_t na_t  [D][D];

  layer1_max #(.D(D)) u_l1 (
    .clk, .rst,
    .s_i(s), .s_v_i(s_v), .s_tag_i(s_t),
    .na_o(na), .na_v_o(na_v), .na_is_a_o(na_a), .na_tag_o(na_t)
  );

  // ---- tier 2: exp2, row sum, new_l ----
  fx_t       p    [D][D];
  logic      p_v  [D][D];
  fx_t       bl_b [D];
  fx_t       bl_l [D];
  logic      bl_v [D];
  iter_tag_t bl_t [D];

  layer2_exp #(.D(D)) u_l2 (
    .clk, .rst, .c_we(cfg_we), .c_i(cfg_c),
    .na_i(na), .na_v_i(na_v), .na_is_a_i(na_a), .na_tag_i(na_t),
    .p_o(p), .p_v_o(p_v),
    .bl_b_o(bl_b), .bl_l_o(bl_l), .bl_v_o(bl_v), .bl_tag_o(bl_t)
  );

  // ---- tier 3: P V and O rescaling ----
  fx_t  o3   [D];
  logic o3_v [D];
  fx_t  o3_l [D];
  logic o3_f [D];

  layer3_pv #(.D(D)) u_l3 (
    .clk, .rst,
    .p_i(p), .p_v_i(p_v),
    .bl_b_i(bl_b), .bl_l_i(bl_l), .bl_v_i(bl_v), .bl_tag_i(bl_t),
    .v_i(l3_v), .v_v_i(l3_vv), .v_first_i(l3_vf),
    .o_o(o3), .o_v_o(o3_v), .o_l_o(o3_l), .o_fin_o(o3_f)
  );

  // ---- line 21: O / l ----
  out_norm #(.D(D)) u_norm (
    .clk, .rst,
    .o_i(o3), .o_v_i(o3_v), .o_l_i(o3_l), .o_fin_i(o3_f),
    .y_o(o_col), .y_v_o(o_col_v)
  );
endmodule
