// als_potq: adaptive layer-wise scaling PoT quantizer for one FP32 value.
//
// The value x is divided by the layer scale alpha = 2^beta without a multiplier: beta is
// subtracted from the unbiased FP32 exponent (the "INT8 addition" of the method). The scaled value
// y = 1.m * 2^ey is then rounded to the nearest power of two. Rounding is a single carry into the
// exponent: ey is incremented when the first mantissa bit is set, i.e. when 1.m >= 1.5, which is
// the midpoint between 2^ey and 2^(ey+1). Results below 2^-7 become zero; results above 2^7 are
// limited to 2^7. The sign passes through.
//
// Interface: x (FP32 bit pattern), beta (signed INT8) in; q (sign + 4-bit exponent, exponent code
// -8 = zero) out, plus two event flags: underflow (a nonzero x was flushed to zero) and saturate
// (the exponent was limited to +7). Purely combinational; the caller registers the result.
//
// Follows the method: exponent-domain scaling by beta, round-to-nearest PoT, limits [-7, 7] for
// b = 5. Choices of this design: the exponent arithmetic is done 11 bits wide so that no beta can
// wrap it; FP32 zeros and subnormals become PoT zero; infinities and NaNs saturate to +-2^7.
module als_potq
  import mf_pkg::*;
(
  input  fp32_t x,
  input  beta_t beta,
  output pot_t  q,
  output logic  underflow,
  output logic  saturate
);

  logic              sgn;
  logic [7:0]        ex;
  logic              m_msb;
  logic signed [10:0] ey;      // scaled unbiased exponent
  logic signed [10:0] er;      // after rounding

  always_comb begin
    sgn   = x[31];
    ex    = x[30:23];
    m_msb = x[22];
    ey    = $signed({3'b000, ex}) - 11'sd127 - 11'(beta);
    er    = ey + 11'($unsigned(m_msb));

    q.s       = sgn;
    q.e       = EXP_ZERO;
    underflow = 1'b0;
    saturate  = 1'b0;
    if (ex == 8'd0) begin
      q.e = EXP_ZERO;                              // zero or subnormal
    end else if (ex == 8'hFF) begin
      q.e      = EXP_BITS'(EXP_MAX);               // inf / NaN
      saturate = 1'b1;
    end else if (er < 11'(EXP_MIN)) begin
      q.e       = EXP_ZERO;
      underflow = 1'b1;
    end else if (er > 11'(EXP_MAX)) begin
      q.e      = EXP_BITS'(EXP_MAX);
      saturate = 1'b1;
    end else begin
      q.e = er[EXP_BITS-1:0];
    end
  end

endmodule
