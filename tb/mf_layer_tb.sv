// mf_layer_tb: runs one convolution layer of ResNet shape through the engine at its default size:
// a 3x3 convolution over 64 input channels (576 products per output), 16 output channels and
// 64 output positions. All three training MACs are exercised:
//   forward      A'[o]   = sum_k (W[o][k] - mean W) * clip(A[0][k])   16 outputs, 36 beats each
//   input grad   G'[k]   = sum_o (W[o][k] - mean W) * G[0][o]          32 outputs, 1 beat each
//                (reuses the weights' beta from the forward scan: no new scan of W)
//   weight grad  dW[j]   = sum_p clip(A[p][j]) * G[p][j]               16 outputs, 4 beats each
// Data follow the usual shapes of such tensors: weights normal with a small positive bias,
// activations rectified normal, gradients normal around 1e-5. Every result is compared bit for bit
// with a real-valued reference of the quantizer and MAC, and each output vector is compared with
// the FP32 dot products of the same preprocessed data. That similarity measures the quantization
// noise of the 5-bit method, not the RTL; its bound of 0.7 only catches gross scale or sign errors.
module mf_layer_tb;
  import mf_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned LANES = 16;
  localparam int K    = 576;     // 3 x 3 x 64
  localparam int COUT = 16;
  localparam int P    = 64;

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

  fp32_t W [COUT][K];
  fp32_t A [P][K];
  fp32_t G [P][COUT];
  fp32_t wmean;

  // operands of the current operation, flat: dot d, element i
  fp32_t XO [];
  fp32_t YO [];
  real   ref_max_x = 0.0, ref_max_y = 0.0;
  real   exp_o [$];
  real   got   [$];
  real   fp_dot [$];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      real e;
      checks++;
      if (exp_o.size() == 0) begin
        failures++;
        $display("FAIL unexpected result");
      end else begin
        e = exp_o.pop_front();
        got.push_back(real'(out));
        if (real'(out) != e) begin
          failures++;
          $display("FAIL out=%0d exp %0.0f", out, e);
        end
      end
    end
  end

  function automatic real absr(real v);
    return v < 0.0 ? -v : v;
  endfunction

  function automatic fp32_t pre(fp32_t v, opnd_kind_e k, fp32_t mean, fp32_t thr);
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

  task automatic send(phase_e ph, int d, int b, int nbeat);
    phase    = ph;
    in_valid = 1;
    in_first = (b == 0);
    in_last  = (b == nbeat - 1);
    for (int i = 0; i < LANES; i++) begin
      x[i] = XO[d * nbeat * LANES + b * LANES + i];
      y[i] = YO[d * nbeat * LANES + b * LANES + i];
    end
    @(negedge clk);
    in_valid = 0; in_first = 0; in_last = 0;
  endtask

  // One operation over XO/YO: optional clears, a scan pass, clip levels from gamma, compute pass.
  task automatic run_op(string name, int ndot, int nbeat, opnd_kind_e kx, opnd_kind_e ky,
                        bit clr_x, bit clr_y, real gx, real gy, int ofrac);
    int  bx, by, sh;
    real mx, my, o, dotq, dotf, sxy, sxx, syy, cs;
    kind_x = kx; kind_y = ky; out_frac = 8'(ofrac);
    mean_x = (kx == KIND_W) ? wmean : 32'd0;
    mean_y = (ky == KIND_W) ? wmean : 32'd0;
    if (clr_x) begin clear_x = 1; ref_max_x = 0.0; end
    if (clr_y) begin clear_y = 1; ref_max_y = 0.0; end
    @(negedge clk);
    clear_x = 0; clear_y = 0;
    // scan pass, no clipping yet
    if (gx > 0.0) thr_x = 32'h7F80_0000;
    if (gy > 0.0) thr_y = 32'h7F80_0000;
    for (int d = 0; d < ndot; d++)
      for (int b = 0; b < nbeat; b++) send(PH_SCAN, d, b, nbeat);
    for (int i = 0; i < ndot * nbeat * LANES; i++) begin
      if (absr(fp2real(pre(XO[i], kx, mean_x, 32'h7F80_0000))) > ref_max_x)
        ref_max_x = absr(fp2real(pre(XO[i], kx, mean_x, 32'h7F80_0000)));
      if (absr(fp2real(pre(YO[i], ky, mean_y, 32'h7F80_0000))) > ref_max_y)
        ref_max_y = absr(fp2real(pre(YO[i], ky, mean_y, 32'h7F80_0000)));
    end
    repeat (3) @(negedge clk);
    // host step: clip levels gamma * max|A|
    if (gx > 0.0) thr_x = real2fp(fp2real({1'b0, max_abs_x}) * gx);
    if (gy > 0.0) thr_y = real2fp(fp2real({1'b0, max_abs_y}) * gy);
    #1;
    mx = ref_max_x; my = ref_max_y;
    if (kx == KIND_A && fp2real(thr_x) < mx) mx = fp2real(thr_x);
    if (ky == KIND_A && fp2real(thr_y) < my) my = fp2real(thr_y);
    bx = ref_beta(mx); by = ref_beta(my);
    checks++;
    if (int'(beta_x) != bx || int'(beta_y) != by) begin
      failures++;
      $display("FAIL %s beta x=%0d exp %0d y=%0d exp %0d", name, beta_x, bx, beta_y, by);
    end
    got.delete();
    fp_dot.delete();
    for (int d = 0; d < ndot; d++) begin
      dotq = 0.0; dotf = 0.0;
      for (int i = 0; i < nbeat * LANES; i++) begin
        fp32_t px, py;
        px = pre(XO[d * nbeat * LANES + i], kx, mean_x, thr_x);
        py = pre(YO[d * nbeat * LANES + i], ky, mean_y, thr_y);
        dotq += pot_val(px[31], ref_pot_exp(px, bx)) * pot_val(py[31], ref_pot_exp(py, by));
        dotf += fp2real(px) * fp2real(py);
      end
      // accumulator in units of 2^-14 (exact), then the output shift
      sh = bx + by + ofrac - 14;
      o  = $floor(dotq * (2.0 ** 14) * (2.0 ** sh));
      exp_o.push_back(o);
      fp_dot.push_back(dotf);
      for (int b = 0; b < nbeat; b++) send(PH_COMPUTE, d, b, nbeat);
    end
    repeat (6) @(negedge clk);
    // quantized result against FP32 of the same preprocessed data
    sxy = 0.0; sxx = 0.0; syy = 0.0;
    for (int d = 0; d < got.size(); d++) begin
      real q;
      q = got[d] / (2.0 ** ofrac);
      sxy += q * fp_dot[d]; sxx += q * q; syy += fp_dot[d] * fp_dot[d];
    end
    cs = (sxx > 0.0 && syy > 0.0) ? sxy / $sqrt(sxx * syy) : 0.0;
    $display("%s: %0d outputs, beta_x=%0d beta_y=%0d, cosine similarity to FP32 = %0.4f",
             name, got.size(), bx, by, cs);
    checks++;
    if (got.size() != ndot || cs < 0.7) begin
      failures++;
      $display("FAIL %s accuracy or count", name);
    end
  endtask

  initial begin
    real s;
    foreach (x[i]) begin x[i] = '0; y[i] = '0; end
    s = 0.0;
    for (int o = 0; o < COUT; o++)
      for (int k = 0; k < K; k++) begin
        W[o][k] = real2fp(0.05 * randn() + 0.004);
        s += fp2real(W[o][k]);
      end
    wmean = real2fp(s / real'(COUT * K));
    for (int p = 0; p < P; p++) begin
      for (int k = 0; k < K; k++) begin
        real r;
        r = randn();
        A[p][k] = (r > 0.0) ? real2fp(r) : 32'd0;
      end
      for (int o = 0; o < COUT; o++) G[p][o] = real2fp(1.0e-5 * randn());
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // forward: X = W row o, Y = A[0]
    XO = new[COUT * K];
    YO = new[COUT * K];
    for (int o = 0; o < COUT; o++)
      for (int k = 0; k < K; k++) begin
        XO[o * K + k] = W[o][k];
        YO[o * K + k] = A[0][k];
      end
    run_op("forward", COUT, K / LANES, KIND_W, KIND_A, 1, 1, -1.0, 0.9, 14);

    // input gradient: X = W column k (beta of W kept from the forward scan), Y = G[0]
    XO = new[32 * COUT];
    YO = new[32 * COUT];
    for (int k = 0; k < 32; k++)
      for (int o = 0; o < COUT; o++) begin
        XO[k * COUT + o] = W[o][k];
        YO[k * COUT + o] = G[0][o];
      end
    run_op("input-grad", 32, COUT / LANES, KIND_W, KIND_G, 0, 1, -1.0, -1.0, 40);

    // weight gradient: X = A column j over positions, Y = G column j over positions
    XO = new[COUT * P];
    YO = new[COUT * P];
    for (int j = 0; j < COUT; j++)
      for (int p = 0; p < P; p++) begin
        XO[j * P + p] = A[p][j];
        YO[j * P + p] = G[p][j];
      end
    run_op("weight-grad", COUT, P / LANES, KIND_A, KIND_G, 1, 1, 0.9, -1.0, 36);

    checks++;
    if (exp_o.size() != 0) begin failures++; $display("FAIL results missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
