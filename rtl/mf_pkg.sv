// mf_pkg: types and constants shared by the multiplication-free training datapath.
//
// A b-bit power-of-two (PoT) number holds a sign bit and a (b-1)-bit exponent. With b = 5 the
// representable values are 0 and +-2^e for e in [-7, 7] (2^(b-2)-1 = 7). The 4-bit exponent field
// is two's complement; its one spare code, -8, is used here to encode the value zero. That zero
// encoding is a choice of this design: the source method only lists zero as a member of the set.
//
// FP32 values travel as raw IEEE-754 single-precision bit patterns (fp32_t).
package mf_pkg;

  // PoT format: b = 5 -> 1 sign bit + 4 exponent bits.
  localparam int unsigned POT_BITS = 5;
  localparam int unsigned EXP_BITS = POT_BITS - 1;                      // 4
  localparam int          EXP_MAX  = (1 << (POT_BITS - 2)) - 1;         // 7
  localparam int          EXP_MIN  = -EXP_MAX;                          // -7
  localparam logic signed [EXP_BITS-1:0] EXP_ZERO = -(1 << (EXP_BITS - 1)); // -8: code for 0

  // The accumulator holds products 2^(e+e') with e+e' >= 2*EXP_MIN, so its LSB weighs
  // 2^(2*EXP_MIN) = 2^-14: ACC_FRAC fractional bits.
  localparam int unsigned ACC_FRAC = 2 * EXP_MAX;                      // 14

  typedef logic [31:0] fp32_t;
  typedef logic signed [7:0] beta_t;                                   // INT8 scale exponent

  typedef struct packed {
    logic                        s;   // 1 = negative
    logic signed [EXP_BITS-1:0]  e;   // exponent, EXP_ZERO encodes the value 0
  } pot_t;

  // Which tensor an operand path carries; selects the preprocessing applied before quantization.
  typedef enum logic [1:0] {
    KIND_W = 2'd0,   // weights: weight bias correction
    KIND_A = 2'd1,   // activations: parameterized ratio clipping
    KIND_G = 2'd2    // activation gradients: no preprocessing
  } opnd_kind_e;

  // Operating phase of the top level.
  typedef enum logic {
    PH_SCAN    = 1'b0,  // stream a tensor once to find max|F| and beta
    PH_COMPUTE = 1'b1   // stream it again to quantize and accumulate
  } phase_e;

endpackage
