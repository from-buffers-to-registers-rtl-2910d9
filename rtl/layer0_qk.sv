// layer0_qk: tier 0 of the stack, a D x D output-stationary systolic array for S = Q K^T.
//
// Row i of the array receives row i of the Q tile from the left, column j receives row j
// of the K tile from the top, both already skewed into the parallelogram pattern (lane r
// delayed by r cycles). PE(i,j) therefore accumulates S[i][j] = sum_k Q[i][k] K[j][k]
// and, d products later, puts it on its TSV register: S[0][0] first, then one new
// anti-diagonal per cycle, the whole tile 2d-1 cycles after the first. The top-left PE is
// free again d cycles after it started, so a new tile may enter every 2d cycles (the
// pipeline cadence) without collision.
// Interface: q_* per row (data, valid, first/last of the d terms, iteration tag),
// k per column; s/s_v/s_tag per PE are the TSV outputs to tier 1.
module layer0_qk
  import fa3d_pkg::*;
#(
  parameter int D = 128
) (
  input  logic      clk,
  input  logic      rst,
  input  fx_t       q_i       [D],
  input  logic      q_v_i     [D],
  input  logic      q_first_i [D],
  input  logic      q_last_i  [D],
  input  iter_tag_t q_tag_i   [D],
  input  fx_t       k_i       [D],
  output fx_t       s_o       [D][D],
  output logic      s_v_o     [D][D],
  output iter_tag_t s_tag_o   [D][D]
);
  // horizontal (index j = column the signal enters) and vertical nets
  fx_t       qh   [D][D+1];
  logic      qvh  [D][D+1];
  logic      qfh  [D][D+1];
  logic      qlh  [D][D+1];
  iter_tag_t qth  [D][D+1];
  fx_t       kv   [D+1][D];

  for (genvar i = 0; i < D; i++) begin : g_row_in
    assign qh[i][0]  = q_i[i];
    assign qvh[i][0] = q_v_i[i];
    assign qfh[i][0] = q_first_i[i];
    assign qlh[i][0] = q_last_i[i];
    assign qth[i][0] = q_tag_i[i];
  end
  for (genvar j = 0; j < D; j++) begin : g_col_in
    assign kv[0][j] = k_i[j];
  end

  for (genvar i = 0; i < D; i++) begin : g_r
    for (genvar j = 0; j < D; j++) begin : g_c
      pe_l0 u_pe (
        .clk, .rst,
        .q_i(qh[i][j]), .q_v_i(qvh[i][j]), .q_first_i(qfh[i][j]), .q_last_i(qlh[i][j]),
        .q_tag_i(qth[i][j]),
        .k_i(kv[i][j]),
        .q_o(qh[i][j+1]), .q_v_o(qvh[i][j+1]), .q_first_o(qfh[i][j+1]),
        .q_last_o(qlh[i][j+1]), .q_tag_o(qth[i][j+1]),
        .k_o(kv[i+1][j]),
        .s_o(s_o[i][j]), .s_v_o(s_v_o[i][j]), .s_tag_o(s_tag_o[i][j])
      );
    end
  end
endmodule
