// mf_mac_tb: drives random PoT code blocks through the MF-MAC and compares with a real-valued
// reference: z = sum of (+-2^(ea+eb)) * 2^14, accumulated with INT32 saturation, and
// out = floor(z * 2^(beta_a + beta_b + out_frac - 14)) saturated to INT32. Checks the one-cycle
// result latency, back-to-back dot products, zero codes, accumulator overflow and shift saturation.
module mf_mac_tb;
  import mf_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned LANES = 16;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, in_last = 0;
  pot_t a [LANES];
  pot_t b [LANES];
  beta_t ba, bb;
  logic signed [7:0]  out_frac;
  logic               out_valid;
  logic signed [31:0] out, z_out;
  logic               overflow;
  int checks = 0, failures = 0;
  int n_ovf = 0, n_left = 0, n_right = 0;

  mf_mac #(.LANES(LANES)) dut (
    .clk, .rst_n, .in_valid, .in_first, .in_last, .a, .b,
    .beta_a(ba), .beta_b(bb), .out_frac, .out_valid, .out, .z_out, .overflow);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real sat32(real v, output bit s);
    s = 0;
    if (v > 2147483647.0)  begin s = 1; return 2147483647.0; end
    if (v < -2147483648.0) begin s = 1; return -2147483648.0; end
    return v;
  endfunction

  // One dot product of n beats; mode 0 = random, 1 = all maximum (forces overflow).
  task automatic run_dot(int n, int mode, int emin, int emax);
    real z, o, sc;
    bit  s, ovf;
    int  sh;
    z   = 0.0;
    ovf = 0;
    ba = beta_t'(int'($urandom_range(30)) - 25);
    bb = beta_t'(int'($urandom_range(30)) - 25);
    out_frac = 8'(int'($urandom_range(40)) - 5);
    for (int t = 0; t < n; t++) begin
      real beat;
      beat = 0.0;
      for (int i = 0; i < LANES; i++) begin
        if (mode == 1) begin
          a[i] = '{s: 1'b0, e: 4'sd7};
          b[i] = '{s: 1'b0, e: 4'sd7};
        end else begin
          a[i].s = 1'($urandom);
          b[i].s = 1'($urandom);
          a[i].e = ($urandom_range(9) == 0) ? EXP_ZERO : 4'(emin + int'($urandom_range(emax - emin)));
          b[i].e = ($urandom_range(9) == 0) ? EXP_ZERO : 4'(emin + int'($urandom_range(emax - emin)));
        end
        beat += pot_val(a[i].s, int'(a[i].e)) * pot_val(b[i].s, int'(b[i].e)) * (2.0 ** 14);
      end
      z = sat32(z + beat, s);
      ovf |= s;
      in_valid = 1;
      in_first = (t == 0);
      in_last  = (t == n - 1);
      @(negedge clk);
      // idle beat in between sometimes: must not disturb the sum
      if (t != n - 1 && $urandom_range(3) == 0) begin
        in_valid = 0;
        foreach (a[i]) a[i].e = 4'sd7;
        @(negedge clk);
      end
    end
    in_valid = 0;
    in_last  = 0;
    // result one cycle after the last beat: sampled at the edge just passed
    sh = int'(ba) + int'(bb) + int'(out_frac) - 14;
    sc = z * (2.0 ** sh);
    o  = sat32($floor(sc), s);
    if (sh >= 0 && s) ovf = 1;
    if (sh >= 0) n_left++; else n_right++;
    checks++;
    if (!out_valid || real'(z_out) != z || real'(out) != o || overflow != ovf) begin
      failures++;
      $display("FAIL valid=%0d z=%0d exp %0.0f out=%0d exp %0.0f ovf=%0d exp %0d sh=%0d",
               out_valid, z_out, z, out, o, overflow, ovf, sh);
    end
    if (ovf) n_ovf++;
    @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("FAIL out_valid held"); end
  endtask

  initial begin
    foreach (a[i]) begin a[i] = '{s: 1'b0, e: EXP_ZERO}; b[i] = '{s: 1'b0, e: EXP_ZERO}; end
    ba = 0; bb = 0; out_frac = 14;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(negedge clk);
    for (int k = 0; k < 300; k++) run_dot(1 + int'($urandom_range(12)), 0, -7, 7);
    for (int k = 0; k < 100; k++) run_dot(1 + int'($urandom_range(12)), 0, -7, -3);
    run_dot(3, 1, 0, 0);
    // literal shift by beta_a + beta_b
    checks++;
    if (n_ovf == 0 || n_left == 0 || n_right == 0) begin
      failures++;
      $display("FAIL coverage ovf=%0d left=%0d right=%0d", n_ovf, n_left, n_right);
    end
    $display("coverage: overflow=%0d left_shift=%0d right_shift=%0d", n_ovf, n_left, n_right);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
