// fa3d_pkg: number format and shared helpers of the 3D-FlashAttention PE stack.
//
// Every value that moves through the four tiers (Q, K, V, S, N, a, P, b, l, O) is a
// signed two's-complement fixed-point number with FX_W bits, FX_F of them fractional.
// The source design does not state a number format; 32-bit Q16.16 is this design's
// choice, wide enough that a d=128 dot product of unit-range inputs does not overflow.
// Products are formed at double width and truncated (arithmetic shift) back to Q16.16.
// FX_NEG_INF stands for the -infinity that Algorithm 1 uses to initialise old_m.
package fa3d_pkg;

  localparam int FX_W = 32;
  localparam int FX_F = 16;

  typedef logic signed [FX_W-1:0] fx_t;

  localparam fx_t FX_ONE     = fx_t'(1) <<< FX_F;
  localparam fx_t FX_ZERO    = '0;
  localparam fx_t FX_NEG_INF = {1'b1, {(FX_W-1){1'b0}}};
  localparam fx_t FX_POS_MAX = {1'b0, {(FX_W-1){1'b1}}};

  // Tag that travels with every tile of data through the tiers.
  //   init: first inner iteration of an outer loop (old_m = -inf, old_l = 0, old_O = 0)
  //   fin : last inner iteration of an outer loop (new_O is final and gets normalised)
  typedef struct packed {
    logic init;
    logic fin;
  } iter_tag_t;

  // Fixed-point product, truncated to FX_F fractional bits.
  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    logic signed [2*FX_W-1:0] p;
    p = 64'(a) * 64'(b);
    return fx_t'(p >>> FX_F);
  endfunction

  function automatic fx_t fx_max(input fx_t a, input fx_t b);
    return (a > b) ? a : b;
  endfunction

  // a - b, saturated to the representable range (old_m may be FX_NEG_INF).
  function automatic fx_t fx_sub_sat(input fx_t a, input fx_t b);
    logic signed [FX_W:0] d;
    d = (FX_W+1)'(a) - (FX_W+1)'(b);
    if (d > (FX_W+1)'(FX_POS_MAX)) return FX_POS_MAX;
    if (d < (FX_W+1)'(FX_NEG_INF)) return FX_NEG_INF;
    return fx_t'(d);
  endfunction

endpackage
