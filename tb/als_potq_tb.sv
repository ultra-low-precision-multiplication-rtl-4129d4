// als_potq_tb: checks the PoT quantizer against the real-valued quantization formula for directed
// corner cases (rounding midpoint, range limits, zero, subnormal, infinity) and random values over
// a wide range of exponents and scale factors.
module als_potq_tb;
  import mf_pkg::*;
  import tb_fp_pkg::*;

  fp32_t x;
  beta_t beta;
  pot_t  q;
  logic  uf, sat;
  int    checks = 0, failures = 0;

  als_potq dut (.x(x), .beta(beta), .q(q), .underflow(uf), .saturate(sat));

  task automatic check(fp32_t xv, int bv, string tag);
    int exp_e;
    x    = xv;
    beta = beta_t'(bv);
    #1;
    exp_e = ref_pot_exp(xv, bv);
    if (xv[30:23] == 8'hFF) exp_e = 7;
    checks++;
    if (int'(q.e) != exp_e || (exp_e != -8 && q.s != xv[31])) begin
      failures++;
      $display("FAIL %s x=%h beta=%0d got s=%0d e=%0d exp e=%0d", tag, xv, bv, q.s, q.e, exp_e);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // 1.5 * 2^0 with beta 0 -> 2^1 (midpoint rounds up); 1.4999 -> 2^0
    check(32'h3FC0_0000, 0, "mid");
    check(32'h3FBF_FFFF, 0, "below-mid");
    // 2^7 exactly, 1.9 * 2^7 -> 2^8 limited to 2^7
    check(32'h4300_0000, 0, "top");
    check(32'h4373_3333, 0, "sat");
    checks++; if (!sat) begin failures++; $display("FAIL sat flag"); end
    // 2^-7 kept, 2^-8 flushed
    check(32'h3C00_0000, 0, "bottom");
    check(32'h3B80_0000, 0, "uflow");
    checks++; if (!uf) begin failures++; $display("FAIL underflow flag"); end
    check(32'h0000_0000, 3, "zero");
    check(32'h0000_1234, 3, "subnormal");
    check(32'hFF80_0000, 3, "-inf");
    // negative, with scale: -0.01 with beta -10 -> -10.24 -> 2^3
    check(32'hBC23_D70A, -10, "neg-scaled");
    for (int i = 0; i < 20000; i++) begin
      int bv;
      bv = int'($urandom_range(40)) - 25;
      check(rand_fp(-40, 20), bv, "rand");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
