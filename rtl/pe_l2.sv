// pe_l2: one processing element of tier 2 (P = exp(N/sqrt d), b = exp(a/sqrt d), row sum,
// new_l = old_l*b + local_l).
//
// The constant log2(e)/sqrt(d) sits in a register of every PE (loaded through c_we/c_i).
// A value N or a arriving from tier 1 through the TSV link is multiplied by it and passed
// through the exp2 unit in the same cycle; the result P (or b) is written to the
// intermediate register. P is read from there by tier 3 through the TSV link (p_o/p_v_o);
// b stays in the PE. The row sum runs as a chain from column 0 to the right: PE(i,0)
// starts it with its own P once that is ready, every other PE adds its P to the partial
// sum P_last arriving from the left and passes it on. N reaches a row right-to-left, so
// P[i][0] is the last P of the row, and the sum then takes one cycle per column to reach
// the rightmost PE (LAST_COL), which holds a, b and old_l. There, when the sum arrives,
// the same multiply-add unit forms new_l = old_l*b + local_l, stores it as old_l, and
// sends b and new_l up the TSV link to tier 3 (bl_* pulse). On the first inner iteration
// (tag.init) old_l is taken as 0.
module pe_l2
  import fa3d_pkg::*;
#(
  parameter bit FIRST_COL = 1'b0,
  parameter bit LAST_COL  = 1'b0
) (
  input  logic      clk,
  input  logic      rst,
  // constant register load
  input  logic      c_we,
  input  fx_t       c_i,
  // TSV link from tier 1
  input  fx_t       na_i,
  input  logic      na_v_i,
  input  logic      na_is_a_i,
  input  iter_tag_t na_tag_i,
  // row-sum chain, from the left and to the right
  input  fx_t       ls_i,
  input  logic      ls_v_i,
  output fx_t       ls_o,
  output logic      ls_v_o,
  // intermediate register read by tier 3 (P)
  output fx_t       p_o,
  output logic      p_v_o,
  // row statistics to tier 3 (rightmost PE only)
  output fx_t       bl_b_o,
  output fx_t       bl_l_o,
  output logic      bl_v_o,
  output iter_tag_t bl_tag_o
);
  fx_t       c_reg;
  fx_t       b_reg;
  fx_t       old_l;
  iter_tag_t tag_reg;
  fx_t       x, e;
  fx_t       local_l, old_eff, new_l;
  logic      fire;

  fx_exp2 u_exp2 (.x(x), .y(e));

  always_comb begin
    x       = fx_mul(na_i, c_reg);
    fire    = FIRST_COL ? p_v_o : ls_v_i;
    local_l = (FIRST_COL ? FX_ZERO : ls_i) + p_o;
    old_eff = tag_reg.init ? FX_ZERO : old_l;
    new_l   = fx_mul(old_eff, b_reg) + local_l;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      c_reg <= '0; b_reg <= '0; old_l <= '0; tag_reg <= '0;
      ls_o <= '0; ls_v_o <= 1'b0; p_o <= '0; p_v_o <= 1'b0;
      bl_b_o <= '0; bl_l_o <= '0; bl_v_o <= 1'b0; bl_tag_o <= '0;
    end else begin
      p_v_o  <= 1'b0;
      ls_v_o <= 1'b0;
      bl_v_o <= 1'b0;
      if (c_we) c_reg <= c_i;
      if (na_v_i) begin
        tag_reg <= na_tag_i;
        if (na_is_a_i) begin
          b_reg <= e;
        end else begin
          p_o   <= e;
          p_v_o <= 1'b1;
        end
      end
      if (fire) begin
        ls_o   <= local_l;
        ls_v_o <= 1'b1;
        if (LAST_COL) begin
          old_l    <= new_l;
          bl_b_o   <= b_reg;
          bl_l_o   <= new_l;
          bl_v_o   <= 1'b1;
          bl_tag_o <= tag_reg;
        end
      end
    end
  end
endmodule
