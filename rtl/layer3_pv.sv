// layer3_pv: tier 3 of the stack, D x D PEs computing local_O = P V and
// new_O = diag(b) old_O + local_O.
//
// Layout (as drawn for the PV dataflow): array row r holds key index r and array column c
// holds query row c, so PE(r,c) keeps P[c][r]; it receives it over the TSV link from the
// tier-2 PE that computed it, PE(c,r) of tier 2. V row r enters array row r from the
// left, skewed by r cycles; partial sums run down each column, so the bottom of column c
// produces local_O[c][0..D-1], one element per cycle. Those elements climb back up the
// column; each PE keeps and rescales one element of O, and the rescaled row new_O[c][*]
// leaves from the top of column c, one element per cycle, together with new_l[c] and the
// "final inner iteration" flag. The bottom PE of column c receives {b[c], new_l[c]} from
// the rightmost PE of tier-2 row c.
module layer3_pv
  import fa3d_pkg::*;
#(
  parameter int D = 128
) (
  input  logic      clk,
  input  logic      rst,
  input  fx_t       p_i       [D][D],   // [query row][key index], from tier 2
  input  logic      p_v_i     [D][D],
  input  fx_t       bl_b_i    [D],      // per query row, from tier 2
  input  fx_t       bl_l_i    [D],
  input  logic      bl_v_i    [D],
  input  iter_tag_t bl_tag_i  [D],
  input  fx_t       v_i       [D],      // per array row (key index), skewed
  input  logic      v_v_i     [D],
  input  logic      v_first_i [D],
  output fx_t       o_o       [D],      // per column (query row), from the top
  output logic      o_v_o     [D],
  output fx_t       o_l_o     [D],
  output logic      o_fin_o   [D]
);
  localparam int IW = (D > 1) ? $clog2(D) : 1;

  fx_t           vh   [D][D+1];
  logic          vvh  [D][D+1];
  logic          vfh  [D][D+1];
  fx_t           ps   [D][D];
  logic          psv  [D][D];
  fx_t           lo   [D][D];
  logic          lov  [D][D];
  logic [IW-1:0] loi  [D][D];
  fx_t           lob  [D][D];
  fx_t           lol  [D][D];
  iter_tag_t     lot  [D][D];
  fx_t           oo   [D][D];
  logic          oov  [D][D];
  fx_t           ool  [D][D];
  logic          oof  [D][D];

  for (genvar r = 0; r < D; r++) begin : g_row_in
    assign vh[r][0]  = v_i[r];
    assign vvh[r][0] = v_v_i[r];
    assign vfh[r][0] = v_first_i[r];
  end

  for (genvar r = 0; r < D; r++) begin : g_r
    for (genvar c = 0; c < D; c++) begin : g_c
      fx_t           ps_in;
      fx_t           lo_in, lob_in, lol_in, oo_in, ool_in;
      logic          lov_in, oov_in, oof_in;
      logic [IW-1:0] loi_in;
      iter_tag_t     lot_in;
      fx_t           blb_in, bll_in;
      logic          blv_in;
      iter_tag_t     blt_in;
      if (r == 0) begin : g_top
        assign ps_in = FX_ZERO;
      end else begin : g_inner
        assign ps_in = ps[r-1][c];
      end
      if (r == D-1) begin : g_bottom
        assign {lo_in, lob_in, lol_in, oo_in, ool_in} = '0;
        assign {lov_in, oov_in, oof_in} = '0;
        assign loi_in = '0;
        assign lot_in = '0;
        assign blb_in = bl_b_i[c];
        assign bll_in = bl_l_i[c];
        assign blv_in = bl_v_i[c];
        assign blt_in = bl_tag_i[c];
      end else begin : g_above
        assign lo_in  = lo[r+1][c];
        assign lov_in = lov[r+1][c];
        assign loi_in = loi[r+1][c];
        assign lob_in = lob[r+1][c];
        assign lol_in = lol[r+1][c];
        assign lot_in = lot[r+1][c];
        assign oo_in  = oo[r+1][c];
        assign oov_in = oov[r+1][c];
        assign ool_in = ool[r+1][c];
        assign oof_in = oof[r+1][c];
        assign {blb_in, bll_in} = '0;
        assign blv_in = 1'b0;
        assign blt_in = '0;
      end
      pe_l3 #(.D(D), .ROW(r), .LAST_ROW(r == D-1)) u_pe (
        .clk, .rst,
        .p_i(p_i[c][r]), .p_v_i(p_v_i[c][r]),
        .v_i(vh[r][c]), .v_v_i(vvh[r][c]), .v_first_i(vfh[r][c]),
        .v_o(vh[r][c+1]), .v_v_o(vvh[r][c+1]), .v_first_o(vfh[r][c+1]),
        .ps_i(ps_in), .ps_o(ps[r][c]), .ps_v_o(psv[r][c]),
        .bl_b_i(blb_in), .bl_l_i(bll_in), .bl_v_i(blv_in), .bl_tag_i(blt_in),
        .lo_i(lo_in), .lo_v_i(lov_in), .lo_idx_i(loi_in), .lo_b_i(lob_in), .lo_l_i(lol_in),
        .lo_tag_i(lot_in),
        .lo_o(lo[r][c]), .lo_v_o(lov[r][c]), .lo_idx_o(loi[r][c]), .lo_b_o(lob[r][c]),
        .lo_l_o(lol[r][c]), .lo_tag_o(lot[r][c]),
        .o_i(oo_in), .o_v_i(oov_in), .o_l_i(ool_in), .o_fin_i(oof_in),
        .o_o(oo[r][c]), .o_v_o(oov[r][c]), .o_l_o(ool[r][c]), .o_fin_o(oof[r][c])
      );
    end
  end

  for (genvar c = 0; c < D; c++) begin : g_out
    assign o_o[c]     = oo[0][c];
    assign o_v_o[c]   = oov[0][c];
    assign o_l_o[c]   = ool[0][c];
    assign o_fin_o[c] = oof[0][c];
  end
endmodule
