// layer2_exp: tier 2 of the stack, D x D exp2 PEs computing P, b, local_l and new_l.
//
// PE(i,j) receives N[i][j] (and, in the rightmost column, a[i] one cycle earlier) from the
// tier-1 PE below, turns it into P[i][j] (or b[i]) in one cycle, and offers P to tier 3.
// The row-sum chain runs left to right and ends in the rightmost column, which computes
// new_l[i] and sends {b[i], new_l[i]} to tier 3. The constant log2(e)/sqrt(d) is loaded
// into every PE when c_we is high. Per-PE P outputs and per-row bl outputs are the TSV
// links to tier 3.
module layer2_exp
  import fa3d_pkg::*;
#(
  parameter int D = 128
) (
  input  logic      clk,
  input  logic      rst,
  input  logic      c_we,
  input  fx_t       c_i,
  input  fx_t       na_i      [D][D],
  input  logic      na_v_i    [D][D],
  input  logic      na_is_a_i [D][D],
  input  iter_tag_t na_tag_i  [D][D],
  output fx_t       p_o       [D][D],
  output logic      p_v_o     [D][D],
  output fx_t       bl_b_o    [D],
  output fx_t       bl_l_o    [D],
  output logic      bl_v_o    [D],
  output iter_tag_t bl_tag_o  [D]
);
  fx_t       ls   [D][D];
  logic      lsv  [D][D];
  fx_t       blb  [D][D];
  fx_t       bll  [D][D];
  logic      blv  [D][D];
  iter_tag_t blt  [D][D];

  for (genvar i = 0; i < D; i++) begin : g_r
    for (genvar j = 0; j < D; j++) begin : g_c
      fx_t  ls_in;
      logic lsv_in;
      if (j == 0) begin : g_first
        assign ls_in  = FX_ZERO;
        assign lsv_in = 1'b0;
      end else begin : g_mid
        assign ls_in  = ls[i][j-1];
        assign lsv_in = lsv[i][j-1];
      end
      pe_l2 #(.FIRST_COL(j == 0), .LAST_COL(j == D-1)) u_pe (
        .clk, .rst, .c_we, .c_i,
        .na_i(na_i[i][j]), .na_v_i(na_v_i[i][j]), .na_is_a_i(na_is_a_i[i][j]),
        .na_tag_i(na_tag_i[i][j]),
        .ls_i(ls_in), .ls_v_i(lsv_in), .ls_o(ls[i][j]), .ls_v_o(lsv[i][j]),
        .p_o(p_o[i][j]), .p_v_o(p_v_o[i][j]),
        .bl_b_o(blb[i][j]), .bl_l_o(bll[i][j]), .bl_v_o(blv[i][j]), .bl_tag_o(blt[i][j])
      );
    end
    assign bl_b_o[i]   = blb[i][D-1];
    assign bl_l_o[i]   = bll[i][D-1];
    assign bl_v_o[i]   = blv[i][D-1];
    assign bl_tag_o[i] = blt[i][D-1];
  end
endmodule
