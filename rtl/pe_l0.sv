// pe_l0: one processing element of tier 0 (S = Q K^T), output-stationary.
//
// Q arrives from the left and K from the top; both are caught in INPUT_REGs and passed
// on to the right and downward one cycle later, as in the tier-0 PE drawing. The product
// of the two registered operands is accumulated in ACC_REG. The Q stream carries the
// control: q_first clears the accumulator (first of the d terms), q_last marks the final
// term, after which the finished S element is placed in the intermediate register that
// drives the TSV link to tier 1 (s_o/s_v, a one-cycle pulse). The drawing's trapezoid
// that selects ACC_REG or K for the downward output belongs to a 2D drain path; in the
// 3D dataflow S leaves only through the TSV, so this PE passes only K downward.
// Latency: operands at the inputs in cycle t are multiplied in t+1; S is valid on s_o
// one cycle after the last product.
module pe_l0
  import fa3d_pkg::*;
(
  input  logic      clk,
  input  logic      rst,
  // from the left neighbour (or the Q feeder)
  input  fx_t       q_i,
  input  logic      q_v_i,
  input  logic      q_first_i,
  input  logic      q_last_i,
  input  iter_tag_t q_tag_i,
  // from the upper neighbour (or the K feeder)
  input  fx_t       k_i,
  // to the right neighbour
  output fx_t       q_o,
  output logic      q_v_o,
  output logic      q_first_o,
  output logic      q_last_o,
  output iter_tag_t q_tag_o,
  // to the lower neighbour
  output fx_t       k_o,
  // intermediate register, read by tier 1 through the TSV link
  output fx_t       s_o,
  output logic      s_v_o,
  output iter_tag_t s_tag_o
);
  fx_t acc;
  fx_t sum;

  always_comb sum = (q_first_o ? FX_ZERO : acc) + fx_mul(q_o, k_o);

  always_ff @(posedge clk) begin
    if (rst) begin
      q_o <= '0; q_v_o <= 1'b0; q_first_o <= 1'b0; q_last_o <= 1'b0; q_tag_o <= '0;
      k_o <= '0; acc <= '0;
      s_o <= '0; s_v_o <= 1'b0; s_tag_o <= '0;
    end else begin
      q_o <= q_i; q_v_o <= q_v_i; q_first_o <= q_first_i; q_last_o <= q_last_i;
      q_tag_o <= q_tag_i;
      k_o <= k_i;
      s_v_o <= 1'b0;
      if (q_v_o) begin
        acc <= sum;
        if (q_last_o) begin
          s_o     <= sum;
          s_v_o   <= 1'b1;
          s_tag_o <= q_tag_o;
        end
      end
    end
  end
endmodule
