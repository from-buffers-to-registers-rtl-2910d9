// out_norm: final normalisation O_i = diag(l)^-1 O of Algorithm 1, line 21.
//
// Once the inner loop of an outer block ends, each O row has to be divided by the running
// sum l of its softmax denominators. The source design states that this extra step is
// performed but not where; here it is a row of D dividers at the top edge of tier 3, one
// per output column of the stack. Column c delivers new_O[c][0..D-1] one element per cycle
// together with new_l[c]; elements flagged as final are divided, (o << F) / l, and appear
// one cycle later on y_o with y_v_o high. Non-final elements are dropped. l is at least 1
// in practice (the row maximum contributes exp(0) = 1); l <= 0 yields 0.
module out_norm
  import fa3d_pkg::*;
#(
  parameter int D = 128
) (
  input  logic clk,
  input  logic rst,
  input  fx_t  o_i     [D],
  input  logic o_v_i   [D],
  input  fx_t  o_l_i   [D],
  input  logic o_fin_i [D],
  output fx_t  y_o     [D],
  output logic y_v_o   [D]
);
  for (genvar c = 0; c < D; c++) begin : g_col
    logic signed [2*FX_W-1:0] num, quo;
    always_comb begin
      num = (2*FX_W)'(o_i[c]) <<< FX_F;
      if (o_l_i[c] > FX_ZERO) quo = num / (2*FX_W)'(o_l_i[c]);
      else                    quo = '0;
    end
    always_ff @(posedge clk) begin
      if (rst) begin
        y_o[c] <= '0; y_v_o[c] <= 1'b0;
      end else begin
        y_v_o[c] <= o_v_i[c] && o_fin_i[c];
        y_o[c]   <= fx_t'(quo);
      end
    end
  end
endmodule
