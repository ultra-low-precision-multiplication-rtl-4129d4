// mf_train_top_tb: end-to-end test of the training MAC engine at its default size (LANES = 16).
//
// Runs three complete operations, each as scan pass + compute pass:
//   1. forward     X = weights (bias corrected), Y = activations (ratio clipped, gamma = 0.75)
//   2. weight grad X = activations (clipped),    Y = gradients (no preprocessing)
//   3. saturation  X = Y = gradients of equal large magnitude: the INT32 accumulator saturates
// Every result is compared with a reference built from real arithmetic: FP32 subtraction rounded
// once, clipping, beta = round(log2 max) - 7, PoT rounding from the real-valued definition, the
// sum of signed powers of two and the final scaling. The result latency (4 edges after the
// in_last beat) is checked, and each mechanism (scan, compute, bias correction, clipping,
// underflow to zero, accumulator saturation, left and right output shift, back-to-back dot
// products, phase switch without a gap) must occur at least once.
module mf_train_top_tb;
  import mf_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned LANES = 16;      // the top's default
  localparam int          NDOT  = 6;       // dot products per operation
  localparam int          NBEAT = 8;       // beats per dot product (128 products)

  logic clk = 0, rst_n = 0;
  opnd_kind_e kind_x = KIND_G, kind_y = KIND_G;
  fp32_t mean_x = 0, mean_y = 0, thr_x = 32'h7F80_0000, thr_y = 32'h7F80_0000;
  logic signed [7:0] out_frac = 14;
  logic clear_x = 0, clear_y = 0;
  logic in_valid = 0, in_first = 0, in_last = 0;
  phase_e phase = PH_SCAN;
  fp32_t x [LANES];
  fp32_t y [LANES];
  logic out_valid, overflow;
  logic signed [31:0] out, z;
  beta_t beta_x, beta_y;
  logic [30:0] max_abs_x, max_abs_y;
  logic [$clog2(LANES+1)-1:0] n_clip_x, n_clip_y, n_underflow, n_saturate;

  mf_train_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  // mechanism counters
  int c_scan = 0, c_compute = 0, c_wbc = 0, c_clip = 0, c_uflow = 0, c_ovf = 0;
  int c_left = 0, c_right = 0, c_b2b = 0, c_switch = 0, c_results = 0;

  always @(posedge clk) begin
    c_clip  += int'(n_clip_x) + int'(n_clip_y);
    c_uflow += int'(n_underflow);
  end

  fp32_t X [NDOT][NBEAT][LANES];
  fp32_t Y [NDOT][NBEAT][LANES];

  // expected results, in order
  real exp_z [$];
  real exp_o [$];
  bit  exp_ov [$];
  int  exp_cyc [$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result monitor: compares each out_valid pulse with the next expected result and its cycle
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      real ez, eo; bit eov; int ec;
      checks++;
      c_results++;
      if (exp_z.size() == 0) begin
        failures++;
        $display("FAIL unexpected result");
      end else begin
        ez = exp_z.pop_front(); eo = exp_o.pop_front(); eov = exp_ov.pop_front();
        ec = exp_cyc.pop_front();
        if (real'(z) != ez || real'(out) != eo || overflow != eov || cyc != ec) begin
          failures++;
          $display("FAIL z=%0d exp %0.0f out=%0d exp %0.0f ovf=%0d exp %0d cyc=%0d exp %0d",
                   z, ez, out, eo, overflow, eov, cyc, ec);
        end
      end
    end
  end

  function automatic real absr(real v);
    return v < 0.0 ? -v : v;
  endfunction

  function automatic int ref_beta(real m);
    int k;
    if (m == 0.0) return -128;
    k = 0;
    while (m >= 2.0 ** (k + 1)) k++;
    while (m < 2.0 ** k) k--;
    if (m / (2.0 ** k) >= 1.5) k++;
    return k - 7;
  endfunction

  // reference preprocessing of one value for a tensor kind
  function automatic fp32_t ref_pre(fp32_t v, opnd_kind_e k, fp32_t mean, fp32_t thr);
    real r, t;
    if (k == KIND_W) return real2fp(fp2real(v) - fp2real(mean));
    if (k == KIND_A) begin
      r = fp2real(v);
      t = fp2real({1'b0, thr[30:0]});
      if (r > t)  return {1'b0, thr[30:0]};
      if (r < -t) return {1'b1, thr[30:0]};
    end
    return v;
  endfunction

  task automatic beat(phase_e ph, int d, int b, bit first, bit last);
    phase    = ph;
    in_valid = 1;
    in_first = first;
    in_last  = last;
    for (int i = 0; i < LANES; i++) begin
      x[i] = X[d][b][i];
      y[i] = Y[d][b][i];
    end
    @(negedge clk);
    in_valid = 0;
    in_first = 0;
    in_last  = 0;
  endtask

  // One operation: clear, scan every beat, optional host step (clip level), compute every dot
  // product with expected results queued. gamma_y < 0 means no clip level for Y from the scan.
  task automatic run_op(opnd_kind_e kx, opnd_kind_e ky, real gamma_y, int ofrac, bit gap_switch);
    real mx, my, cap_y, zr, o, sc, p;
    int  bx, by, sh;
    bit  s;
    kind_x = kx; kind_y = ky; out_frac = 8'(ofrac);
    clear_x = 1; clear_y = 1;
    @(negedge clk);
    clear_x = 0; clear_y = 0;
    // scan pass (clip level of Y not yet known: no clipping)
    thr_y = 32'h7F80_0000;
    if (kx != KIND_A) thr_x = 32'h7F80_0000;
    for (int d = 0; d < NDOT; d++)
      for (int b = 0; b < NBEAT; b++) beat(PH_SCAN, d, b, 0, 0);
    c_scan++;
    // let the scan beats reach the maximum registers, host forms the clip level max|Y| * gamma
    if (!gap_switch) repeat (3) @(negedge clk);
    if (gamma_y > 0.0) thr_y = real2fp(fp2real({1'b0, max_abs_y}) * gamma_y);
    // reference maxima of the preprocessed tensors
    mx = 0.0; my = 0.0;
    for (int d = 0; d < NDOT; d++)
      for (int b = 0; b < NBEAT; b++)
        for (int i = 0; i < LANES; i++) begin
          if (absr(fp2real(ref_pre(X[d][b][i], kx, mean_x, 32'h7F80_0000))) > mx)
            mx = absr(fp2real(ref_pre(X[d][b][i], kx, mean_x, 32'h7F80_0000)));
          if (absr(fp2real(Y[d][b][i])) > my) my = absr(fp2real(Y[d][b][i]));
        end
    if (kx == KIND_A && fp2real(thr_x) < mx) mx = fp2real(thr_x);
    cap_y = (ky == KIND_A && gamma_y > 0.0) ? fp2real(thr_y) : my;
    if (cap_y < my) my = cap_y;
    bx = ref_beta(mx); by = ref_beta(my);
    if (gap_switch) c_switch++;
    // compute pass
    for (int d = 0; d < NDOT; d++) begin
      zr = 0.0;
      s  = 0;
      for (int b = 0; b < NBEAT; b++) begin
        real bsum;
        bsum = 0.0;
        for (int i = 0; i < LANES; i++) begin
          fp32_t px, py;
          int ex, ey;
          px = ref_pre(X[d][b][i], kx, mean_x, thr_x);
          py = ref_pre(Y[d][b][i], ky, mean_y, thr_y);
          if (kx == KIND_W && px != X[d][b][i]) c_wbc++;
          ex = ref_pot_exp(px, bx);
          ey = ref_pot_exp(py, by);
          bsum += pot_val(px[31], ex) * pot_val(py[31], ey) * (2.0 ** 14);
        end
        zr = zr + bsum;
        if (zr > 2147483647.0)  begin zr = 2147483647.0;  s = 1; end
        if (zr < -2147483648.0) begin zr = -2147483648.0; s = 1; end
        beat(PH_COMPUTE, d, b, b == 0, b == NBEAT - 1);
        if (b == NBEAT - 1) exp_cyc.push_back(cyc + 4);
      end
      sh = bx + by + ofrac - 14;
      sc = zr * (2.0 ** sh);
      o  = $floor(sc);
      if (o > 2147483647.0)  begin o = 2147483647.0;  s = 1; end
      if (o < -2147483648.0) begin o = -2147483648.0; s = 1; end
      if (s) c_ovf++;
      if (sh >= 0) c_left++; else c_right++;
      if (d > 0) c_b2b++;
      exp_z.push_back(zr); exp_o.push_back(o); exp_ov.push_back(s);
    end
    c_compute++;
    repeat (6) @(negedge clk);
    checks++;
    if (int'(beta_x) != bx || int'(beta_y) != by) begin
      failures++;
      $display("FAIL beta x=%0d exp %0d y=%0d exp %0d", beta_x, bx, beta_y, by);
    end
  endtask

  initial begin
    real msum;
    foreach (x[i]) begin x[i] = '0; y[i] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- 1. forward: W (biased by +2^-7) and A (non-negative, a few large spikes) ----
    msum = 0.0;
    for (int d = 0; d < NDOT; d++)
      for (int b = 0; b < NBEAT; b++)
        for (int i = 0; i < LANES; i++) begin
          X[d][b][i] = real2fp(fp2real(rand_fp(-9, -4)) + 0.0078125);
          msum += fp2real(X[d][b][i]);
          Y[d][b][i] = ($urandom_range(7) == 0) ? 32'd0 : {1'b0, rand_fp(-14, 1)} ;
          if ($urandom_range(60) == 0) Y[d][b][i] = {1'b0, rand_fp(3, 4)};
        end
    mean_x = real2fp(msum / real'(NDOT * NBEAT * LANES));
    run_op(KIND_W, KIND_A, 0.75, 14, 0);

    // ---- 2. weight gradient: X = A (clip level kept from step 1), Y = G ----
    thr_x = thr_y;
    for (int d = 0; d < NDOT; d++)
      for (int b = 0; b < NBEAT; b++)
        for (int i = 0; i < LANES; i++) begin
          X[d][b][i] = Y[d][b][i];
          Y[d][b][i] = rand_fp(-22, -12);
        end
    run_op(KIND_A, KIND_G, -1.0, 40, 1);

    // ---- 3. equal large gradients: every product is 2^14, 16 lanes overflow INT32 ----
    for (int d = 0; d < NDOT; d++)
      for (int b = 0; b < NBEAT; b++)
        for (int i = 0; i < LANES; i++) begin
          X[d][b][i] = 32'h3F80_0000 | (32'($urandom_range(1)) << 31);
          Y[d][b][i] = 32'h3F80_0000;
        end
    run_op(KIND_G, KIND_G, -1.0, 14, 0);

    repeat (10) @(negedge clk);
    checks++;
    if (exp_z.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_z.size()); end
    $display("mechanisms: scan=%0d compute=%0d wbc=%0d clip=%0d underflow=%0d overflow=%0d left=%0d right=%0d back_to_back=%0d phase_switch=%0d results=%0d",
             c_scan, c_compute, c_wbc, c_clip, c_uflow, c_ovf, c_left, c_right, c_b2b, c_switch, c_results);
    if (c_scan == 0)    begin failures++; $display("FAIL no scan"); end
    if (c_compute == 0) begin failures++; $display("FAIL no compute"); end
    if (c_wbc == 0)     begin failures++; $display("FAIL no bias correction"); end
    if (c_clip == 0)    begin failures++; $display("FAIL no clipping"); end
    if (c_uflow == 0)   begin failures++; $display("FAIL no underflow"); end
    if (c_ovf == 0)     begin failures++; $display("FAIL no overflow"); end
    if (c_left == 0)    begin failures++; $display("FAIL no left shift"); end
    if (c_right == 0)   begin failures++; $display("FAIL no right shift"); end
    if (c_b2b == 0)     begin failures++; $display("FAIL no back-to-back"); end
    if (c_switch == 0)  begin failures++; $display("FAIL no phase switch"); end
    checks += 10;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
