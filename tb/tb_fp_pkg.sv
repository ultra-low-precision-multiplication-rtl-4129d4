// tb_fp_pkg: reference arithmetic for the testbenches, written with SystemVerilog reals and
// independent of the RTL: FP32 <-> real conversion (round to nearest even, subnormals flushed),
// the PoT quantizer as a real-valued formula, and a small random FP32 generator.
package tb_fp_pkg;

  // FP32 bit pattern -> real (subnormals read as zero).
  function automatic real fp2real(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  // real -> FP32, round to nearest even, results below 2^-126 flushed to +0.
  function automatic logic [31:0] real2fp(real r);
    logic [63:0] d;
    int          e;
    logic [52:0] m;          // hidden + 52
    logic [23:0] m24;
    logic [28:0] low;
    if (r == 0.0) return 32'd0;
    d   = $realtobits(r);
    e   = int'(d[62:52]) - 1023 + 127;
    m   = {1'b1, d[51:0]};
    m24 = m[52:29];
    low = m[28:0];
    if (low[28] && (low[27:0] != 0 || m24[0])) begin
      m24 = m24 + 24'd1;
      if (m24 == 24'd0) begin
        m24 = 24'h800000;
        e   = e + 1;
      end
    end
    if (e <= 0)   return 32'd0;
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(e), m24[22:0]};
  endfunction

  // PoT quantization of an FP32 value with layer scale 2^beta, from the real-valued definition:
  // y = |x| / 2^beta; k = floor(log2 y); round up when y / 2^k >= 1.5; zero below 2^-7; limit 2^7.
  // Returns the exponent, or -8 for zero.
  function automatic int ref_pot_exp(logic [31:0] x, int beta);
    real y;
    int  k;
    y = fp2real(x);
    if (y < 0.0) y = -y;
    if (y == 0.0) return -8;
    y = y / (2.0 ** beta);
    k = 0;
    while (y >= 2.0 ** (k + 1)) k++;
    while (y < 2.0 ** k) k--;
    if (y / (2.0 ** k) >= 1.5) k++;
    if (k < -7) return -8;
    if (k > 7)  return 7;
    return k;
  endfunction

  // Real value of a PoT code (sign, exponent; -8 = zero), unscaled.
  function automatic real pot_val(logic s, int e);
    if (e == -8) return 0.0;
    return (s ? -1.0 : 1.0) * (2.0 ** e);
  endfunction

  // Random normal FP32 with magnitude 1.m * 2^e, e in [emin, emax], random sign.
  function automatic logic [31:0] rand_fp(int emin, int emax);
    int e;
    e = emin + int'($urandom_range(emax - emin));
    return {1'($urandom), 8'(e + 127), 23'($urandom)};
  endfunction

  // Layer scale exponent from a maximum magnitude: round(log2 m) - 7, rounding up at 1.5 * 2^k.
  function automatic int ref_beta(real m);
    int k;
    if (m == 0.0) return -128;
    k = 0;
    while (m >= 2.0 ** (k + 1)) k++;
    while (m < 2.0 ** k) k--;
    if (m / (2.0 ** k) >= 1.5) k++;
    return k - 7;
  endfunction

  // Standard normal sample (Box-Muller).
  function automatic real randn();
    real u1, u2;
    u1 = (real'($urandom_range(1000000)) + 1.0) / 1000002.0;
    u2 = real'($urandom_range(1000000)) / 1000001.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

endpackage
