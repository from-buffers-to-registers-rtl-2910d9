// fa3d_ctrl: schedules the 3D-FlashAttention loops onto the four-tier stack.
//
// On start it runs tr outer blocks (query tiles) times tc inner blocks (key/value tiles).
// Every inner iteration gets 2d cycles: during the first d it reads one column of the Q
// tile and of the K tile per cycle (qk_rd, index qk_k) for tier 0; a new iteration starts
// every 2d cycles, which is the steady-state rate of the stack. The V tile of the same
// iteration is read V_OFF cycles after its Q/K tile (v_rd, index v_c), the earliest point
// at which every P element of the iteration has reached tier 3 in this implementation
// (the last one, P[i][0], leaves tier 2 about 3d cycles in). Because the Q/K schedule is
// strictly periodic, the V schedule is the same loop sequence started V_OFF cycles later.
// Tags: init marks the first inner iteration of an outer block (the running statistics
// restart), fin the last (its output is final and gets normalised).
// done pulses when the last V column has been issued; results leave the stack about 3d
// cycles after that.
module fa3d_ctrl #(
  parameter int D     = 128,
  parameter int NW    = 16,
  parameter int V_OFF = 3*D + 3
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  input  logic [NW-1:0] tr,
  input  logic [NW-1:0] tc,
  output logic          busy,
  output logic          done,
  // Q/K tile read (tier 0 feed)
  output logic          qk_rd,
  output logic [NW-1:0] qk_k,
  output logic [NW-1:0] qk_bi,
  output logic [NW-1:0] qk_bj,
  output logic          qk_first,   // first of the d columns
  output logic          qk_last,    // last of the d columns
  output logic          qk_init,    // first inner iteration of the outer block
  output logic          qk_fin,     // last inner iteration of the outer block
  // V tile read (tier 3 feed)
  output logic          v_rd,
  output logic [NW-1:0] v_c,
  output logic [NW-1:0] v_bi,
  output logic [NW-1:0] v_bj,
  output logic          v_first
);
  logic          qk_busy, v_busy, v_busy_q;
  logic          qk_fj, qk_lj, v_fj, v_lj;
  logic          wait_v;
  logic [NW-1:0] tr_q, tc_q;
  logic [NW+2:0] dly;
  logic          v_start;
  logic          qk_start;

  iter_seq #(.D(D), .NW(NW)) u_qk (
    .clk, .rst, .start(qk_start), .tr, .tc,
    .busy(qk_busy), .active(qk_rd), .idx(qk_k), .bi(qk_bi), .bj(qk_bj),
    .first_j(qk_fj), .last_j(qk_lj)
  );

  iter_seq #(.D(D), .NW(NW)) u_v (
    .clk, .rst, .start(v_start), .tr(tr_q), .tc(tc_q),
    .busy(v_busy), .active(v_rd), .idx(v_c), .bi(v_bi), .bj(v_bj),
    .first_j(v_fj), .last_j(v_lj)
  );

  always_comb begin
    busy     = qk_busy || wait_v || v_busy;
    qk_start = start && !busy;
    qk_first = qk_rd && (qk_k == '0);
    qk_last  = qk_rd && (qk_k == NW'(D-1));
    qk_init  = qk_fj;
    qk_fin   = qk_lj;
    v_first  = v_rd && (v_c == '0);
    v_start  = wait_v && (dly == (NW+3)'(V_OFF - 1));
    done     = v_busy_q && !v_busy;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wait_v <= 1'b0; dly <= '0; tr_q <= '0; tc_q <= '0; v_busy_q <= 1'b0;
    end else begin
      v_busy_q <= v_busy;
      if (qk_start && tr != '0 && tc != '0) begin
        wait_v <= 1'b1; dly <= '0; tr_q <= tr; tc_q <= tc;
      end else if (wait_v) begin
        dly <= dly + (NW+3)'(1);
        if (v_start) wait_v <= 1'b0;
      end
    end
  end
endmodule
