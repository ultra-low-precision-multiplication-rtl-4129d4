// fp32_add: combinational IEEE-754 single-precision adder (a + b), used by weight bias correction.
//
// Operands are unpacked with their hidden bit, the smaller magnitude is aligned to the larger one
// with guard, round and sticky bits, the mantissas are added or subtracted, the result is
// normalized with a leading-zero count and rounded to nearest, ties to even.
//
// Simplifications chosen for this design: subnormal inputs are read as zero and results below the
// normal range are flushed to +0 (a flush-to-zero adder); an exact zero difference gives +0;
// infinities propagate and inf - inf or any NaN input gives the quiet NaN 0x7FC00000; results
// above the normal range become infinity.
module fp32_add
  import mf_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  logic        sa, sb, sl, ss;
  logic [7:0]  ea, eb, el, es;
  logic [23:0] ml, ms;
  logic        a_zero, b_zero, a_spec, b_spec, a_nan, b_nan;
  logic [7:0]  d;
  logic [26:0] ml_x, ms_x;          // mantissa + guard, round, sticky
  logic [27:0] sum;
  logic [26:0] norm;
  logic signed [9:0] exp_r;
  logic [4:0]  lz;
  logic [24:0] rnd;                 // rounded mantissa with carry bit
  logic        sticky;

  always_comb begin
    sticky = 1'b0;
    sa = a[31];  ea = a[30:23];
    sb = b[31];  eb = b[30:23];
    a_zero = (ea == 8'd0);
    b_zero = (eb == 8'd0);
    a_spec = (ea == 8'hFF);
    b_spec = (eb == 8'hFF);
    a_nan  = a_spec && (a[22:0] != 0);
    b_nan  = b_spec && (b[22:0] != 0);

    // larger magnitude first
    if (a[30:0] >= b[30:0]) begin
      sl = sa; el = ea; ml = {~a_zero, a[22:0]};
      ss = sb; es = eb; ms = {~b_zero, b[22:0]};
    end else begin
      sl = sb; el = eb; ml = {~b_zero, b[22:0]};
      ss = sa; es = ea; ms = {~a_zero, a[22:0]};
    end
    if (es == 8'd0) ms = '0;

    d    = el - es;
    ml_x = {ml, 3'b000};
    if (d >= 8'd27) begin
      ms_x = {26'd0, (ms != 0)};
    end else begin
      ms_x   = {ms, 3'b000} >> d;
      sticky = (({ms, 3'b000} & ((27'd1 << d) - 27'd1)) != 0);
      ms_x[0] = ms_x[0] | sticky;
    end

    if (sl == ss) sum = {1'b0, ml_x} + {1'b0, ms_x};
    else          sum = {1'b0, ml_x} - {1'b0, ms_x};

    exp_r = $signed({2'b00, el});
    norm  = '0;
    lz    = '0;
    if (sum[27]) begin
      norm  = {sum[27:2], sum[1] | sum[0]};
      exp_r = exp_r + 10'sd1;
    end else begin
      for (int i = 26; i >= 0; i--) begin
        if (sum[i] && norm == '0) begin
          lz   = 5'(26 - i);
          norm = sum[26:0] << (26 - i);
        end
      end
      exp_r = exp_r - 10'($unsigned(lz));
    end

    // round to nearest, ties to even: norm = 1.xxx (24 bits) | G | R | S
    rnd = {1'b0, norm[26:3]};
    if (norm[2] && (norm[1] || norm[0] || norm[3])) rnd = rnd + 25'd1;
    if (rnd[24]) begin
      rnd   = rnd >> 1;
      exp_r = exp_r + 10'sd1;
    end

    if (a_nan || b_nan || (a_spec && b_spec && (sa != sb))) begin
      y = 32'h7FC0_0000;
    end else if (a_spec) begin
      y = {sa, 8'hFF, 23'd0};
    end else if (b_spec) begin
      y = {sb, 8'hFF, 23'd0};
    end else if (sum == '0 || ml == '0) begin
      y = 32'd0;
    end else if (exp_r >= 10'sd255) begin
      y = {sl, 8'hFF, 23'd0};
    end else if (exp_r <= 10'sd0) begin
      y = 32'd0;
    end else begin
      y = {sl, exp_r[7:0], rnd[22:0]};
    end
  end

endmodule
