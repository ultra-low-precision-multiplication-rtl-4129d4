// wbc_tb: checks weight bias correction w - mean against real arithmetic rounded once to FP32
// (round to nearest even), over random weights and means of similar and different magnitudes,
// both signs, exact cancellation, carries into the next binade, infinity and the pass-through mode.
module wbc_tb;
  import mf_pkg::*;
  import tb_fp_pkg::*;

  logic  enable;
  fp32_t w, mean, w_corr;
  int    checks = 0, failures = 0;

  wbc dut (.*);

  task automatic check(fp32_t wv, fp32_t mv, logic en, fp32_t expv, string tag);
    w = wv; mean = mv; enable = en;
    #1;
    checks++;
    if (w_corr !== expv) begin
      failures++;
      $display("FAIL %s w=%h mean=%h got %h exp %h", tag, wv, mv, w_corr, expv);
    end
  endtask

  function automatic fp32_t ref_sub(fp32_t wv, fp32_t mv);
    return real2fp(fp2real(wv) - fp2real(mv));
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp32_t wv, mv;
    check(32'h3F80_0000, 32'h3F80_0000, 1, 32'h0000_0000, "cancel");
    check(32'h3F80_0000, 32'hBF80_0000, 1, 32'h4000_0000, "1-(-1)");
    check(32'h3FFF_FFFF, 32'hB400_0000, 1, ref_sub(32'h3FFF_FFFF, 32'hB400_0000), "carry");
    check(32'h3C23_D70A, 32'h3A83_126F, 1, ref_sub(32'h3C23_D70A, 32'h3A83_126F), "0.01-0.001");
    check(32'h7F80_0000, 32'h3F80_0000, 1, 32'h7F80_0000, "inf");
    check(32'h3F80_0000, 32'h4000_0000, 0, 32'h3F80_0000, "bypass");
    for (int i = 0; i < 30000; i++) begin
      int e;
      e  = int'($urandom_range(40)) - 30;
      wv = rand_fp(e - 3, e + 3);
      mv = ($urandom_range(1)) ? rand_fp(e - 25, e - 1) : rand_fp(e - 3, e + 3);
      check(wv, mv, 1, ref_sub(wv, mv), "rand");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
