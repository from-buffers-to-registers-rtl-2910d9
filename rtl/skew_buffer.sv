// skew_buffer: turns a vector stream into the parallelogram ("skewed") injection pattern.
//
// Lane r of the input vector is delayed by r clock cycles (lane 0 passes straight
// through), so that element r of a vector presented in cycle t reaches array row/column r
// in cycle t + r. This is the input pattern drawn for Q, K and V entering the tiers. Each
// lane is a plain shift register of DW bits, cleared by reset so that valid bits carried
// in the lanes start at 0.
module skew_buffer #(
  parameter int D  = 128,
  parameter int DW = 32
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [DW-1:0] d_i [D],
  output logic [DW-1:0] d_o [D]
);
  assign d_o[0] = d_i[0];
  for (genvar r = 1; r < D; r++) begin : g_lane
    logic [DW-1:0] sr [r];
    always_ff @(posedge clk) begin
      if (rst) begin
        for (int k = 0; k < r; k++) sr[k] <= '0;
      end else begin
        sr[0] <= d_i[r];
        for (int k = 1; k < r; k++) sr[k] <= sr[k-1];
      end
    end
    assign d_o[r] = sr[r-1];
  end
endmodule
