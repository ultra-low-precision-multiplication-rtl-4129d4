// wbc: weight bias correction for one FP32 weight.
//
// Weights drift away from zero mean during training, which no longer matches the symmetric PoT
// grid. The correction recentres them: w_corr = w - mean(W), computed before quantization with an
// FP32 adder (the sign of the mean is inverted, so no multiplier is involved).
//
// Interface: w and the layer mean (FP32 bit patterns) in, w_corr out; enable = 0 passes w through
// unchanged. Purely combinational.
//
// Follows the method: W~ = W - mean(W), applied before the quantizer. Choice of this design: the
// mean itself is an input, supplied once per layer by whoever holds the FP32 weights; this block
// does not compute it. The adder flushes subnormals to zero (see fp32_add).
module wbc
  import mf_pkg::*;
(
  input  logic  enable,
  input  fp32_t w,
  input  fp32_t mean,
  output fp32_t w_corr
);

  fp32_t diff;

  fp32_add u_sub (
    .a (w),
    .b ({~mean[31], mean[30:0]}),
    .y (diff)
  );

  assign w_corr = enable ? diff : w;

endmodule
