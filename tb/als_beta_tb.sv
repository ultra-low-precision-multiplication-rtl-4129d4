// als_beta_tb: streams random tensors through the scaling factor unit and compares the running
// maximum magnitude and beta with a real-valued reference (beta = round(log2 max) - 7, rounding up
// at 1.5 * 2^k). Also checks clear, idle beats, the cap input, the all-zero case and that the
// maximum then quantizes to exactly 2^7.
module als_beta_tb;
  import mf_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned LANES = 8;

  logic        clk = 0, rst_n = 0, clear = 0, in_valid = 0;
  fp32_t       in_data [LANES];
  logic [30:0] cap = 31'h7FFF_FFFF;
  logic [30:0] max_abs;
  beta_t       beta;
  int          checks = 0, failures = 0;

  als_beta #(.LANES(LANES)) dut (.*);

  always #5 clk = ~clk;

  function automatic int ref_beta(real m);
    int k;
    if (m == 0.0) return -128;
    k = 0;
    while (m >= 2.0 ** (k + 1)) k++;
    while (m < 2.0 ** k) k--;
    if (m / (2.0 ** k) >= 1.5) k++;
    return k - 7;
  endfunction

  task automatic expect_state(real m, string tag);
    int rb;
    rb = ref_beta(m);
    checks++;
    if (fp2real({1'b0, max_abs}) != m || int'(beta) != rb) begin
      failures++;
      $display("FAIL %s max=%g exp %g beta=%0d exp %0d", tag, fp2real({1'b0, max_abs}), m, beta, rb);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real m;
    foreach (in_data[i]) in_data[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    expect_state(0.0, "reset");
    for (int t = 0; t < 50; t++) begin
      int emin, emax, beats;
      emin  = int'($urandom_range(60)) - 50;
      emax  = emin + int'($urandom_range(12));
      beats = 1 + int'($urandom_range(20));
      clear = 1;
      @(negedge clk);
      clear = 0;
      expect_state(0.0, "clear");
      m = 0.0;
      for (int b = 0; b < beats; b++) begin
        in_valid = ($urandom_range(3) != 0);
        foreach (in_data[i]) begin
          in_data[i] = rand_fp(emin, emax);
          if (in_valid && (fp2real(in_data[i]) > m || -fp2real(in_data[i]) > m))
            m = (fp2real(in_data[i]) > 0.0) ? fp2real(in_data[i]) : -fp2real(in_data[i]);
        end
        @(negedge clk);
        expect_state(m, "stream");
      end
      in_valid = 0;
      // the maximum must map to 2^7 under its own beta
      checks++;
      if (m != 0.0 && ref_pot_exp({1'b0, max_abs}, int'(beta)) != 7) begin
        failures++;
        $display("FAIL max does not map to 2^7");
      end
      // cap below the maximum: beta follows the cap
      if (m != 0.0) begin
        cap = max_abs >> 2;
        #1;
        checks++;
        if (int'(beta) != ref_beta(fp2real({1'b0, cap}))) begin
          failures++;
          $display("FAIL cap beta=%0d", beta);
        end
        cap = 31'h7FFF_FFFF;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
