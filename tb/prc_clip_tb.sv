// prc_clip_tb: checks ratio clipping against a real-valued reference: values beyond +-thr become
// +-thr, others pass unchanged; the clipped flag, the bypass mode and the threshold boundary.
module prc_clip_tb;
  import mf_pkg::*;
  import tb_fp_pkg::*;

  logic  enable, clipped;
  fp32_t a, thr, a_clip;
  int    checks = 0, failures = 0, n_clipped = 0;

  prc_clip dut (.*);

  task automatic check(fp32_t av, fp32_t tv, logic en);
    real ar, tr, er;
    logic ec;
    a = av; thr = tv; enable = en;
    #1;
    ar = fp2real(av);
    tr = fp2real({1'b0, tv[30:0]});
    ec = en && (ar > tr || ar < -tr);
    er = !ec ? ar : (ar > 0.0 ? tr : -tr);
    checks++;
    if (fp2real(a_clip) != er || clipped != ec) begin
      failures++;
      $display("FAIL a=%h thr=%h got %h/%0d", av, tv, a_clip, clipped);
    end
    if (clipped) n_clipped++;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(32'h4000_0000, 32'h4000_0000, 1);   // at the threshold: unchanged
    check(32'h4000_0001, 32'h4000_0000, 1);
    check(32'hC000_0001, 32'h4000_0000, 1);
    check(32'hC100_0000, 32'h4000_0000, 0);
    for (int i = 0; i < 20000; i++) check(rand_fp(-10, 5), rand_fp(-6, 2), $urandom_range(4) != 0);
    checks++;
    if (n_clipped == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
