// als_beta: layer-wise scaling factor unit.
//
// The scale alpha = max|F| / 2^7 maps the largest magnitude of a tensor F onto the largest PoT
// value 2^7. It is rounded to a power of two, alpha ~ 2^beta, so that scaling needs only an
// exponent addition. This unit streams F, LANES FP32 values per cycle, keeps the running maximum
// magnitude in a register, and derives beta = Round(log2(max|F|)) - 7 from it.
//
// Magnitudes of non-NaN FP32 numbers order like their low 31 bits read as unsigned integers, so the
// maximum is a tree of integer comparators. Round(log2(.)) uses the same carry rounding as the
// quantizer (exponent + first mantissa bit), so that max|F| always quantizes to exactly 2^7.
//
// Interface: clear (synchronous, resets the maximum to 0), in_valid with in_data[LANES] folds a
// beat into the maximum. cap is an FP32 magnitude that bounds the maximum used for beta (set it to
// the clip level when the tensor will be clipped, since then max|clipped| = min(max|F|, cap); all
// ones means no bound). max_abs and beta reflect every beat accepted up to the previous clock edge
// (one cycle latency). An all-zero tensor gives beta = -128. beta saturates to the INT8 range.
//
// Follows the method: alpha from max|F|, beta = Round(log2 alpha), one beta per tensor. Choices of
// this design: the streaming interface, LANES, the rounding rule shared with the quantizer and the
// INT8 saturation.
module als_beta
  import mf_pkg::*;
#(
  parameter int unsigned LANES = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        in_valid,
  input  fp32_t       in_data [LANES],
  input  logic [30:0] cap,
  output logic [30:0] max_abs,
  output beta_t       beta
);

  logic [30:0] beat_max;
  logic [30:0] max_q;

  always_comb begin
    beat_max = '0;
    for (int i = 0; i < LANES; i++) begin
      if (in_data[i][30:0] > beat_max) beat_max = in_data[i][30:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      max_q <= '0;
    end else if (clear) begin
      max_q <= '0;
    end else if (in_valid && beat_max > max_q) begin
      max_q <= beat_max;
    end
  end

  logic [30:0]        eff_max;
  logic signed [10:0] b_wide;
  always_comb begin
    eff_max = (cap < max_q) ? cap : max_q;
    b_wide  = $signed({3'b000, eff_max[30:23]}) - 11'sd127 + 11'($unsigned(eff_max[22]))
              - 11'(EXP_MAX);
    if (eff_max[30:23] == 8'd0)    beta = beta_t'(-128);
    else if (b_wide > 11'sd127)    beta = beta_t'(127);
    else if (b_wide < -11'sd128)   beta = beta_t'(-128);
    else                           beta = b_wide[7:0];
  end

  assign max_abs = max_q;

endmodule
