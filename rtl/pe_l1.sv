// pe_l1: one processing element of tier 1 (row max, new_m, N = S - new_m, a = old_m - new_m).
//
// S arrives from the tier-0 PE below through the TSV link and is held in the intermediate
// register. In the same cycle it is compared with the running maximum S_last coming from
// the left neighbour and the larger value S_max' is sent right, so the rightmost PE of a
// row sees the row maximum local_m. The row maximum then travels back leftward, one PE
// per cycle. When it passes, each PE latches it as local_m, compares it with its own copy
// of old_m to form new_m, subtracts new_m from its held S to form N, and writes N to its
// TSV register for tier 2; new_m then becomes old_m. The rightmost PE (LAST_COL) also
// forms a = old_m - new_m. It has one subtractor, as drawn, so it sends a first and N one
// cycle later over the same TSV register (na_is_a tells them apart). On the first inner
// iteration (tag.init) old_m is taken as -infinity.
// In the array the rightmost PE's leftward input is tied to its own rightward output.
module pe_l1
  import fa3d_pkg::*;
#(
  parameter bit FIRST_COL = 1'b0,
  parameter bit LAST_COL  = 1'b0
) (
  input  logic      clk,
  input  logic      rst,
  // TSV link from tier 0
  input  fx_t       s_i,
  input  logic      s_v_i,
  input  iter_tag_t s_tag_i,
  // rightward running maximum (S_last in, S_max' out)
  input  fx_t       smax_i,
  output fx_t       smax_o,
  output logic      smax_v_o,
  // leftward row maximum (S_max)
  input  fx_t       lm_i,
  input  logic      lm_v_i,
  output fx_t       lm_o,
  output logic      lm_v_o,
  // intermediate register read by tier 2 through the TSV link
  output fx_t       na_o,
  output logic      na_v_o,
  output logic      na_is_a_o,
  output iter_tag_t na_tag_o
);
  fx_t       s_reg;
  iter_tag_t tag_reg;
  fx_t       old_m, local_m, new_m;
  logic      pend_n;
  fx_t       old_eff, nm;

  always_comb begin
    old_eff = tag_reg.init ? FX_NEG_INF : old_m;
    nm      = fx_max(lm_i, old_eff);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      s_reg <= '0; tag_reg <= '0; old_m <= FX_NEG_INF; local_m <= FX_NEG_INF;
      new_m <= FX_NEG_INF; pend_n <= 1'b0;
      smax_o <= '0; smax_v_o <= 1'b0; lm_o <= '0; lm_v_o <= 1'b0;
      na_o <= '0; na_v_o <= 1'b0; na_is_a_o <= 1'b0; na_tag_o <= '0;
    end else begin
      smax_v_o <= 1'b0;
      lm_v_o   <= 1'b0;
      na_v_o   <= 1'b0;
      if (s_v_i) begin
        s_reg    <= s_i;
        tag_reg  <= s_tag_i;
        smax_o   <= FIRST_COL ? s_i : fx_max(smax_i, s_i);
        smax_v_o <= 1'b1;
      end
      if (lm_v_i) begin
        local_m  <= lm_i;
        new_m    <= nm;
        old_m    <= nm;
        lm_o     <= lm_i;
        lm_v_o   <= 1'b1;
        na_v_o   <= 1'b1;
        na_tag_o <= tag_reg;
        if (LAST_COL) begin
          na_o      <= fx_sub_sat(old_eff, nm);
          na_is_a_o <= 1'b1;
          pend_n    <= 1'b1;
        end else begin
          na_o      <= fx_sub_sat(s_reg, nm);
          na_is_a_o <= 1'b0;
        end
      end else if (LAST_COL && pend_n) begin
        na_o      <= fx_sub_sat(s_reg, new_m);
        na_is_a_o <= 1'b0;
        na_v_o    <= 1'b1;
        pend_n    <= 1'b0;
      end
    end
  end
endmodule
