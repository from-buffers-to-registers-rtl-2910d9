// pe_l3: one processing element of tier 3 (local_O = P V, new_O = b*old_O + local_O).
//
// Weight-stationary P x V. P arrives from tier 2 through the TSV link into the
// intermediate register (a shadow weight); it becomes the active weight when the first
// V element of the next tile passes (v_first), so the next tile's P can arrive while the
// current one is still in use. V enters an INPUT_REG from the left and moves right; the
// partial sum from the PE above is added to w*V and moves down. The bottom row (LAST_ROW)
// turns the finished column sums into local_O elements, numbering them 0..D-1 in order of
// appearance, and pushes them into an upward Local_O chain together with b and new_l of
// that query row, which the bottom PE receives from tier 2 (bl_*). Each PE keeps one
// element of O: the PE in row ROW takes the element numbered ROW as it passes, forms
// new_O = b*old_O + local_O (old_O = 0 on the first inner iteration), keeps it as old_O
// and loads it into its OUTPUT_REG. All PEs of a column do this in the same cycle; the
// OUTPUT_REGs then shift upward, so the column emits new_O[0..D-1] from its top, one per
// cycle, with new_l and the "final iteration" flag alongside.
module pe_l3
  import fa3d_pkg::*;
#(
  parameter int D        = 128,
  parameter int ROW      = 0,
  parameter bit LAST_ROW = 1'b0,
  localparam int IW      = (D > 1) ? $clog2(D) : 1
) (
  input  logic          clk,
  input  logic          rst,
  // TSV link from tier 2
  input  fx_t           p_i,
  input  logic          p_v_i,
  // V from the left, to the right
  input  fx_t           v_i,
  input  logic          v_v_i,
  input  logic          v_first_i,
  output fx_t           v_o,
  output logic          v_v_o,
  output logic          v_first_o,
  // partial sums, from above and downward
  input  fx_t           ps_i,
  output fx_t           ps_o,
  output logic          ps_v_o,
  // row statistics from tier 2 (bottom row only)
  input  fx_t           bl_b_i,
  input  fx_t           bl_l_i,
  input  logic          bl_v_i,
  input  iter_tag_t     bl_tag_i,
  // Local_O chain, from below and upward
  input  fx_t           lo_i,
  input  logic          lo_v_i,
  input  logic [IW-1:0] lo_idx_i,
  input  fx_t           lo_b_i,
  input  fx_t           lo_l_i,
  input  iter_tag_t     lo_tag_i,
  output fx_t           lo_o,
  output logic          lo_v_o,
  output logic [IW-1:0] lo_idx_o,
  output fx_t           lo_b_o,
  output fx_t           lo_l_o,
  output iter_tag_t     lo_tag_o,
  // new_O output chain, from below and upward
  input  fx_t           o_i,
  input  logic          o_v_i,
  input  fx_t           o_l_i,
  input  logic          o_fin_i,
  output fx_t           o_o,
  output logic          o_v_o,
  output fx_t           o_l_o,
  output logic          o_fin_o
);
  fx_t           w_sh, w_act, w_use;
  fx_t           old_o;
  logic [IW-1:0] cnt, ps_idx;
  fx_t           blb, bll;
  iter_tag_t     blt;
  // what enters this PE's Local_O register
  fx_t           lo_in;
  logic          lo_v_in;
  logic [IW-1:0] lo_idx_in;
  fx_t           lo_b_in, lo_l_in;
  iter_tag_t     lo_tag_in;
  fx_t           old_eff, new_o;
  logic          take;

  always_comb begin
    w_use = v_first_o ? w_sh : w_act;
    if (LAST_ROW) begin
      lo_in     = ps_o;
      lo_v_in   = ps_v_o;
      lo_idx_in = ps_idx;
      lo_b_in   = blb;
      lo_l_in   = bll;
      lo_tag_in = blt;
    end else begin
      lo_in     = lo_i;
      lo_v_in   = lo_v_i;
      lo_idx_in = lo_idx_i;
      lo_b_in   = lo_b_i;
      lo_l_in   = lo_l_i;
      lo_tag_in = lo_tag_i;
    end
    take    = lo_v_o && (lo_idx_o == IW'(ROW));
    old_eff = lo_tag_o.init ? FX_ZERO : old_o;
    new_o   = fx_mul(lo_b_o, old_eff) + lo_o;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      w_sh <= '0; w_act <= '0; old_o <= '0; cnt <= '0; ps_idx <= '0;
      blb <= '0; bll <= '0; blt <= '0;
      v_o <= '0; v_v_o <= 1'b0; v_first_o <= 1'b0;
      ps_o <= '0; ps_v_o <= 1'b0;
      lo_o <= '0; lo_v_o <= 1'b0; lo_idx_o <= '0; lo_b_o <= '0; lo_l_o <= '0; lo_tag_o <= '0;
      o_o <= '0; o_v_o <= 1'b0; o_l_o <= '0; o_fin_o <= 1'b0;
    end else begin
      if (p_v_i) w_sh <= p_i;
      if (LAST_ROW && bl_v_i) begin
        blb <= bl_b_i; bll <= bl_l_i; blt <= bl_tag_i;
      end
      // V input register
      v_o <= v_i; v_v_o <= v_v_i; v_first_o <= v_first_i;
      // weight-stationary multiply-accumulate
      ps_v_o <= v_v_o;
      if (v_v_o) begin
        ps_o   <= ps_i + fx_mul(w_use, v_o);
        ps_idx <= v_first_o ? '0 : cnt;
        cnt    <= v_first_o ? IW'(1) : cnt + IW'(1);
        if (v_first_o) w_act <= w_sh;
      end
      // Local_O register
      lo_o <= lo_in; lo_v_o <= lo_v_in; lo_idx_o <= lo_idx_in;
      lo_b_o <= lo_b_in; lo_l_o <= lo_l_in; lo_tag_o <= lo_tag_in;
      // O scaling and output register
      if (take) begin
        old_o   <= new_o;
        o_o     <= new_o;
        o_v_o   <= 1'b1;
        o_l_o   <= lo_l_o;
        o_fin_o <= lo_tag_o.fin;
      end else begin
        o_o     <= o_i;
        o_v_o   <= o_v_i;
        o_l_o   <= o_l_i;
        o_fin_o <= o_fin_i;
      end
    end
  end
endmodule
