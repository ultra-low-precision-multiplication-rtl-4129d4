// prc_clip: parameterized ratio clipping for one FP32 activation.
//
// The PoT grid is coarse far from zero. Clipping activations to a fraction gamma of their largest
// magnitude moves the top of the grid down and so gives the tail more resolution. The clip level
// thr = max|A| * gamma is one scalar per layer; this block takes it as an input and clamps
//   a > thr -> +thr,   a < -thr -> -thr,   otherwise a.
// The comparison is an unsigned integer compare of the FP32 magnitude bits (valid for all
// non-NaN values), so no floating-point arithmetic is needed per element.
//
// Interface: enable, a and thr (FP32; the sign of thr is ignored) in; a_clip and the event flag
// clipped out. enable = 0 passes a through. Purely combinational.
//
// Follows the method: the clipping rule with threshold max|A| * gamma. Choice of this design: the
// scalar product max|A| * gamma is formed outside (the maximum is available from the scaling
// factor unit), as the method treats per-layer scalar operations as negligible.
module prc_clip
  import mf_pkg::*;
(
  input  logic  enable,
  input  fp32_t a,
  input  fp32_t thr,
  output fp32_t a_clip,
  output logic  clipped
);

  always_comb begin
    clipped = enable && (a[30:0] > thr[30:0]);
    a_clip  = clipped ? {a[31], thr[30:0]} : a;
  end

endmodule
