// iter_seq: loop sequencer of the controller.
//
// After a start pulse it walks the FlashAttention loops, outer block bi = 0..tr-1 and
// inner block bj = 0..tc-1, giving every inner iteration a slot of 2*D cycles. In the
// first D cycles of a slot it is active and counts idx = 0..D-1; the second half is idle,
// which is the 2d-cycle cadence at which the stack accepts a new tile. tr and tc are
// sampled at start; busy stays high until the last slot has ended.
module iter_seq #(
  parameter int D  = 128,
  parameter int NW = 16
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  input  logic [NW-1:0] tr,
  input  logic [NW-1:0] tc,
  output logic          busy,
  output logic          active,
  output logic [NW-1:0] idx,
  output logic [NW-1:0] bi,
  output logic [NW-1:0] bj,
  output logic          first_j,
  output logic          last_j
);
  logic [NW-1:0] tr_q, tc_q;
  logic [NW:0]   phase;

  always_comb begin
    active  = busy && (phase < (NW+1)'(D));
    idx     = phase[NW-1:0];
    first_j = (bj == '0);
    last_j  = (bj == tc_q - NW'(1));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0; phase <= '0; bi <= '0; bj <= '0; tr_q <= '0; tc_q <= '0;
    end else if (!busy) begin
      if (start && tr != '0 && tc != '0) begin
        busy <= 1'b1; phase <= '0; bi <= '0; bj <= '0; tr_q <= tr; tc_q <= tc;
      end
    end else begin
      if (phase == (NW+1)'(2*D-1)) begin
        phase <= '0;
        if (bj == tc_q - NW'(1)) begin
          bj <= '0;
          if (bi == tr_q - NW'(1)) begin
            busy <= 1'b0;
            bi   <= '0;
          end else begin
            bi <= bi + NW'(1);
          end
        end else begin
          bj <= bj + NW'(1);
        end
      end else begin
        phase <= phase + (NW+1)'(1);
      end
    end
  end
endmodule
