// mf_mac: multiplication-free multiply-accumulate over PoT-coded data blocks.
//
// Each cycle accepts LANES pairs of 5-bit PoT codes (a, b). The product of two PoT numbers
// s*2^k and s'*2^m is (s xor s') * 2^(k+m): one 4-bit exponent addition (5-bit result, range
// [-14, 14]) and one XOR of the signs. The product is turned into a signed fixed-point term
// +-2^(k+m+14) (a one-hot value, LSB weight 2^-14), the LANES terms are summed by an adder tree and
// added to the INT32 accumulator z. When the last beat of a block has been added, z is shifted by
// beta_a + beta_b to undo the two layer scales and give the result.
//
// Output format: out is a signed 32-bit fixed-point number with out_frac fractional bits, so the
// applied shift is beta_a + beta_b + out_frac - 14 (left if positive, arithmetic right if
// negative). With out_frac = 14, the shift is exactly beta_a + beta_b, the shift of the method.
// Left shifts and accumulation saturate to the INT32 range and raise overflow.
//
// Timing: in_valid beats; in_first marks the first beat of a dot product (the accumulator is
// restarted), in_last the final beat. out_valid pulses one cycle after the last beat, holding out,
// the raw accumulator z_out and overflow (sticky over the whole dot product). Throughput is one
// beat of LANES pairs per cycle with no stalls.
//
// Follows the method: INT4 addition, XOR sign flip, INT32 accumulation, INT32 shift by
// beta + beta'. Choices of this design: the zero code, the 2^-14 LSB of the accumulator, the
// adder tree over LANES lanes, saturation instead of wrap-around, and the out_frac output format.
module mf_mac
  import mf_pkg::*;
#(
  parameter int unsigned LANES = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic               in_first,
  input  logic               in_last,
  input  pot_t               a [LANES],
  input  pot_t               b [LANES],
  input  beta_t              beta_a,
  input  beta_t              beta_b,
  input  logic signed [7:0]  out_frac,
  output logic               out_valid,
  output logic signed [31:0] out,
  output logic signed [31:0] z_out,
  output logic               overflow
);

  localparam int unsigned TERM_W = ACC_FRAC + EXP_MAX * 2 + 2;          // 30: sign + 2^28
  localparam int unsigned SUM_W  = TERM_W + $clog2(LANES) + 1;

  localparam logic signed [SUM_W-1:0] ACC_MAX = SUM_W'(32'sh7FFF_FFFF);
  localparam logic signed [SUM_W-1:0] ACC_MIN = -SUM_W'(33'sh0_8000_0000);

  // ---- per-lane INT4 addition + XOR ----
  logic signed [EXP_BITS:0]   eo   [LANES];   // 5-bit exponent sum
  logic                       so   [LANES];   // product sign
  logic signed [TERM_W-1:0]   term [LANES];

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      eo[i] = (EXP_BITS+1)'(a[i].e) + (EXP_BITS+1)'(b[i].e);
      so[i] = a[i].s ^ b[i].s;
      if (a[i].e == EXP_ZERO || b[i].e == EXP_ZERO) begin
        term[i] = '0;
      end else begin
        term[i] = TERM_W'(1) << (eo[i] + (EXP_BITS+1)'(ACC_FRAC));
        if (so[i]) term[i] = -term[i];
      end
    end
  end

  // ---- lane sum and INT32 accumulation ----
  logic signed [SUM_W-1:0] lane_sum;
  logic signed [SUM_W-1:0] acc_wide;
  logic signed [31:0]      z_q, z_next;
  logic                    ovf_q, ovf_next, acc_sat;

  always_comb begin
    lane_sum = '0;
    for (int i = 0; i < LANES; i++) lane_sum += SUM_W'(term[i]);
    acc_wide = (in_first ? '0 : SUM_W'(z_q)) + lane_sum;
    acc_sat  = 1'b0;
    if (acc_wide > ACC_MAX) begin
      z_next  = 32'sh7FFF_FFFF;
      acc_sat = 1'b1;
    end else if (acc_wide < ACC_MIN) begin
      z_next  = 32'sh8000_0000;
      acc_sat = 1'b1;
    end else begin
      z_next = acc_wide[31:0];
    end
    ovf_next = (in_first ? 1'b0 : ovf_q) | acc_sat;
  end

  // ---- INT32 shift by beta_a + beta_b (+ output format) ----
  logic signed [10:0] sh;
  logic signed [31:0] shifted;
  logic               shift_sat;
  logic signed [63:0] wide;

  always_comb begin
    sh        = 11'(beta_a) + 11'(beta_b) + 11'(out_frac) - 11'(ACC_FRAC);
    shift_sat = 1'b0;
    wide      = 64'(z_next);
    shifted   = z_next;
    if (sh >= 0) begin
      if (z_next == 0) begin
        shifted = '0;
      end else if (sh >= 11'sd32) begin
        shifted   = z_next[31] ? 32'sh8000_0000 : 32'sh7FFF_FFFF;
        shift_sat = 1'b1;
      end else begin
        wide = 64'(z_next) <<< sh[4:0];
        if (wide > 64'sh7FFF_FFFF) begin
          shifted = 32'sh7FFF_FFFF;  shift_sat = 1'b1;
        end else if (wide < -64'sh8000_0000) begin
          shifted = 32'sh8000_0000;  shift_sat = 1'b1;
        end else begin
          shifted = wide[31:0];
        end
      end
    end else begin
      if (sh <= -11'sd31) shifted = z_next >>> 31;
      else                shifted = z_next >>> (-sh);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      z_q       <= '0;
      ovf_q     <= 1'b0;
      out_valid <= 1'b0;
      out       <= '0;
      z_out     <= '0;
      overflow  <= 1'b0;
    end else begin
      out_valid <= in_valid && in_last;
      if (in_valid) begin
        z_q   <= z_next;
        ovf_q <= ovf_next;
        if (in_last) begin
          out      <= shifted;
          z_out    <= z_next;
          overflow <= ovf_next | shift_sat;
        end
      end
    end
  end

endmodule
