// layer1_max: tier 1 of the stack, D x D PEs forming N = S - rowmax-updated m and a.
//
// Each PE takes S[i][j] from the tier-0 PE directly below. Because tier 0 finishes S along
// anti-diagonals, S[i][j] arrives exactly one cycle after S[i][j-1], so a rightward
// compare chain with one register per PE yields the row maximum local_m at the rightmost
// PE in the cycle after S[i][D-1] arrives (about 2d cycles into an iteration for row 0).
// local_m then travels leftward; PE(i,j) computes N[i][j] when it passes, so N leaves the
// tier right-to-left along each row, finishing around 4d. The rightmost column also emits
// a[i] = old_m - new_m (about 3d for the last row). Outputs na/na_v/na_is_a/na_tag per PE
// go up the TSV link to tier 2.
module layer1_max
  import fa3d_pkg::*;
#(
  parameter int D = 128
) (
  input  logic      clk,
  input  logic      rst,
  input  fx_t       s_i       [D][D],
  input  logic      s_v_i     [D][D],
  input  iter_tag_t s_tag_i   [D][D],
  output fx_t       na_o      [D][D],
  output logic      na_v_o    [D][D],
  output logic      na_is_a_o [D][D],
  output iter_tag_t na_tag_o  [D][D]
);
  fx_t  smax  [D][D];
  logic smaxv [D][D];
  fx_t  lm    [D][D];
  logic lmv   [D][D];

  for (genvar i = 0; i < D; i++) begin : g_r
    for (genvar j = 0; j < D; j++) begin : g_c
      fx_t  smax_in;
      fx_t  lm_in;
      logic lmv_in;
      if (j == 0) begin : g_first
        assign smax_in = FX_NEG_INF;
      end else begin : g_mid
        assign smax_in = smax[i][j-1];
      end
      if (j == D-1) begin : g_last
        assign lm_in  = smax[i][j];
        assign lmv_in = smaxv[i][j];
      end else begin : g_notlast
        assign lm_in  = lm[i][j+1];
        assign lmv_in = lmv[i][j+1];
      end
      pe_l1 #(.FIRST_COL(j == 0), .LAST_COL(j == D-1)) u_pe (
        .clk, .rst,
        .s_i(s_i[i][j]), .s_v_i(s_v_i[i][j]), .s_tag_i(s_tag_i[i][j]),
        .smax_i(smax_in), .smax_o(smax[i][j]), .smax_v_o(smaxv[i][j]),
        .lm_i(lm_in), .lm_v_i(lmv_in), .lm_o(lm[i][j]), .lm_v_o(lmv[i][j]),
        .na_o(na_o[i][j]), .na_v_o(na_v_o[i][j]), .na_is_a_o(na_is_a_o[i][j]),
        .na_tag_o(na_tag_o[i][j])
      );
    end
  end
endmodule
