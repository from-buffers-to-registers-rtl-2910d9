// fx_exp2: combinational base-2 exponential for non-positive fixed-point inputs.
//
// Layer 2 evaluates exp(x/sqrt(d)) as exp2(x*log2(e)/sqrt(d)), as the source design
// does, using an exp2 unit of the kind common in accelerators. Its insides are not
// given there; this unit is the simplest one of that kind:
//   x = I + f with I = floor(x) <= 0 and f in [0,1)
//   2^f ~= 1 + f*(C1 + C2*f), C1 = 0.6565, C2 = 0.3435 (exact at f = 0 and f = 1,
//         relative error at most 0.32 % in between)
//   2^x = (2^f) >> -I, flushed to zero once the shift reaches FX_W-1.
// Inputs in the algorithm are always <= 0 (N = S - new_m, a = old_m - new_m); a positive
// input is clamped to 0 (result 1.0). Purely combinational, no latency.
module fx_exp2
  import fa3d_pkg::*;
(
  input  fx_t x,   // Q16.16, expected <= 0
  output fx_t y    // Q16.16, in (0, 1]
);
  localparam logic [FX_F:0] C1 = 17'd43024;  // round(0.6565 * 2^16)
  localparam logic [FX_F:0] C2 = 17'd22512;  // round(0.3435 * 2^16)

  fx_t                 xc;
  fx_t                 ipart;
  logic [FX_W-1:0]     nshift;
  logic [FX_F-1:0]     f;
  logic [2*FX_F+1:0]   t2, t1;
  logic [FX_F+1:0]     mant;

  always_comb begin
    xc     = (x > FX_ZERO) ? FX_ZERO : x;
    ipart  = xc >>> FX_F;              // floor(x), <= 0
    nshift = FX_W'(-ipart);
    f      = xc[FX_F-1:0];
    t2     = (2*FX_F+2)'(C2) * (2*FX_F+2)'(f);
    t1     = ((2*FX_F+2)'(C1) + (t2 >> FX_F)) * (2*FX_F+2)'(f);
    mant   = (FX_F+2)'(FX_ONE) + (FX_F+2)'(t1 >> FX_F);
    if (nshift >= FX_W'(FX_W-1)) y = FX_ZERO;
    else                         y = fx_t'(({{(FX_W-FX_F-2){1'b0}}, mant}) >> nshift);
  end
endmodule
