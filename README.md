# Multiplication-free MAC engine for low-precision DNN training

Training a neural network spends most of its energy in the multiply-accumulates of the linear
layers (convolutions and fully-connected layers), and each of those multiplies is normally an FP32
multiply. This design removes the multiplier altogether. Every operand — weights `W`, activations
`A` and activation gradients `G` alike — is first rounded to a signed power of two, `±2^e`. The
product of two such numbers is `±2^(e+e')`: a 4-bit integer addition of the exponents and an XOR
of the signs. The products are accumulated in an INT32 register. One shift at the end restores
the scale that was taken out before quantization.

The RTL implements the three pieces this needs and wires them into one engine:

* **ALS-PoTQ** (adaptive layer-wise scaling power-of-two quantization). It finds one scale
  exponent `beta` per tensor and converts FP32 values to 5-bit power-of-two codes, using only
  exponent additions and one rounding carry.
* **MF-MAC** (multiplication-free MAC). It adds exponents, XORs signs, accumulates in INT32 and
  shifts the sum by `beta + beta'`.
* Two pre-quantization corrections used in training. **Weight bias correction** subtracts the
  layer mean from the weights. **Ratio clipping** clamps activations to a fraction `gamma` of
  their largest magnitude.

The engine computes one dot product at a time and takes 16 value pairs per clock. It serves all
three MACs of a training step:

| training step            | operand X             | operand Y             |
|--------------------------|-----------------------|-----------------------|
| forward `A(l+1)`         | `W` (bias-corrected)  | `A` (clipped)         |
| backward `G(l-1)`        | `W` (bias-corrected)  | `G`                   |
| weight gradient `dW`     | `A` (clipped)         | `G`                   |

The FP32 tensors stay outside the engine, in host memory. So do the optimizer and the weight
update.

## 1. The 5-bit power-of-two code

A code has a sign bit and a 4-bit two's-complement exponent (`mf_pkg::pot_t`).

| field | bits | meaning |
|-------|------|---------|
| `s`   | 1    | 1 = negative |
| `e`   | 4    | exponent in [-7, 7]; the spare code -8 stands for the value 0 |

The representable set is therefore `{0, ±2^-7, …, ±2^7}`: 15 magnitudes and zero, symmetric about
zero. In general a `b`-bit code covers the exponents `±(2^(b-2) - 1)`. The zero encoding (-8) is
this design's choice; any other spare pattern would do.

The product of two codes has an exponent in [-14, 14]. That is the 5-bit intermediate of the MAC.

## 2. Layer-wise scaling: why `beta` exists and how it is found

Weights, activations and gradients lie in very different ranges. The scale exponent that suits gradients is
typically between -20 and -10, against -5 to -2 for weights and activations. A fixed 15-magnitude grid cannot cover all of them. Each tensor
`F` is therefore divided by a scale `alpha = max|F| / 2^7` before quantization, which places its
largest element at the top of the grid. The scale is rounded to a power of two,
`alpha ≈ 2^beta`. Dividing by it then only subtracts `beta` from each FP32 exponent. There is one
`beta` per tensor, so its cost is negligible.

`als_beta` finds `max|F|`. For non-NaN FP32 values, comparing magnitudes is the same as comparing
the low 31 bits as unsigned integers, so the maximum is an integer comparator tree over the lanes
plus a running-maximum register. It derives

    beta = round(log2(max|F|)) - 7

with the same rounding rule as the quantizer (section 3), so the maximum always quantizes to
exactly `2^7`. `beta` is a signed INT8 and saturates. An all-zero tensor gives -128.

Because `beta` depends on the whole tensor, the engine works in **two passes**:

1. **Scan** (`phase = PH_SCAN`). Stream the tensor once. Only the maxima are updated.
2. **Compute** (`phase = PH_COMPUTE`). Stream the operand pairs. They are quantized with the now
   fixed `beta_x`, `beta_y` and accumulated.

A side whose `beta` is already known needs no new scan. Weights reused in the backward pass are an
example: leave `clear_x` low and do not scan that side again. The phase may switch from one beat
to the next with no idle cycle. A scan beat's contribution to `beta` is visible to the beat that
follows it in the pipeline.

For clipped activations, the maximum that counts is that of the *clipped* tensor, which is
`min(max|A|, thr)`. `als_beta` has a `cap` input for this. The engine connects it to the clip level
of an activation operand, so a single scan serves both the clip level and `beta` (see section 5).

## 3. The quantizer (`als_potq`)

For one FP32 value `x = (-1)^s · 1.m · 2^(E-127)`:

1. Scale: `ey = (E - 127) - beta`. This is the exponent subtraction that replaces the division by
   `alpha`. It is computed 11 bits wide so that it cannot wrap.
2. Round: `e = ey + m[22]`. The first mantissa bit is set exactly when `1.m ≥ 1.5`. Since 1.5 is
   the midpoint between `2^ey` and `2^(ey+1)`, this is round-to-nearest power of two in the linear
   domain, implemented as one carry.
3. Limit: `e < -7` gives zero (flag `underflow`). `e > 7` gives `2^7` (flag `saturate`). Otherwise
   the code is `{s, e}`.

FP32 zeros and subnormals give the zero code. Infinities and NaNs saturate.

*Departure to know about.* The written definition of the method rounds in the log domain,
`round(log2|f|)`, whose threshold is `sqrt(2)·2^k`, not `1.5·2^k`. The energy analysis of the same
method describes the rounding as a single carry taken about half the time. That is the mantissa-bit
rule used here. The two differ only for `1.414 ≤ 1.m < 1.5`.

## 4. The MF-MAC (`mf_mac`): accumulation and rescaling

This is the least obvious part, because the products are fractional powers of two but the
accumulator is an integer.

**Per lane.** `eo = ea + eb` (5 bits) and `so = sa ^ sb`. If either code is zero the term is 0.
Otherwise the term is `±2^(eo + 14)`, a one-hot 29-bit value that is negated for `so = 1`. Adding
the 14 makes the smallest product, `2^-14`, equal to 1. The accumulator is therefore a fixed-point
number with 14 fractional bits, and its largest single term is `2^28`.

**Per beat.** The 16 terms are summed by an adder tree 35 bits wide. The sum is added to `z`, the
INT32 accumulator. `in_first` restarts `z`. A sum outside the INT32 range saturates and sets the
sticky `overflow` flag for that dot product. Sixteen products at the very top of the grid
(`2^7 · 2^7`) already reach `2^32`, so saturation is possible in one beat. Real data mostly sits
near the bottom of the grid.

**Rescaling.** The real value of the dot product is `z · 2^-14 · 2^(beta_x + beta_y)`. The result
`out` is a signed 32-bit fixed-point number with `out_frac` fractional bits. It is obtained by one
shift of `z` by

    sh = beta_x + beta_y + out_frac - 14

A left shift (`sh ≥ 0`) saturates. A right shift is arithmetic, rounding toward minus infinity.
With `out_frac = 14` this is exactly "shift `z` by `beta + beta'`", as the method states. The
`out_frac` port was added in this design because a literal shift leaves gradient products
(`beta + beta'` near -30) with no significant bits. `z_out` gives the raw accumulator.

Latency is one clock: `out_valid` pulses on the edge after the `in_last` beat. Throughput is one
beat per clock, with no stalls.

## 5. Pre-quantization corrections

**Weight bias correction** (`wbc`). During training the weights drift away from zero mean, which
fits the symmetric grid badly. The block computes `w - mean(W)` with an FP32 adder, `fp32_add`.
That adder rounds to nearest even and is flush-to-zero: subnormal inputs are read as 0 and results
below the normal range become +0. The mean is a per-layer **input**: the host computes it from
the FP32 weights it holds. This block does not compute it.

**Ratio clipping** (`prc_clip`). Far from zero the power-of-two grid is sparse, so the top of the
activation range wastes resolution. Clipping to `thr = gamma · max|A|` moves the top of the grid
down. The per-element clamp needs only a magnitude compare of the FP32 bits. The scalar `thr` is
computed by the host: it reads `max_abs_y` after the scan pass, multiplies by `gamma` and writes
`thr_y`. It does this once per layer, before the compute pass.

The tensor kind of each side (`kind_x`, `kind_y`: `KIND_W`, `KIND_A`, `KIND_G`) selects which
correction applies. `KIND_G` passes values through unchanged.

## 6. Engine top level (`mf_train_top`)

```
 x[16] ─► reg ─► WBC/clip ─► reg ─┬─► als_beta (scan) ──► beta_x ─┐
                                   └─► als_potq ×16 ─► reg ─► qx ─┐│
 y[16] ─► reg ─► WBC/clip ─► reg ─┬─► als_beta (scan) ──► beta_y ─┼┼─► mf_mac ─► out, z
                                   └─► als_potq ×16 ─► reg ─► qy ─┘
   stage 1        (stage 2)          (stage 2→3)                       stage 4
```

Each operand side is an `mf_operand_path`. It holds 16 `wbc` and 16 `prc_clip` instances, a
register stage, one `als_beta`, 16 `als_potq` instances and a code register.

**Timing.** A beat is registered on entry (stage 1), after the correction (stage 2) and as codes
(stage 3). The MAC registers its result (stage 4). `out_valid` therefore rises on the 4th rising
edge after the edge that samples the `in_last` beat. Reset is asynchronous and active low.

**Ports.**

| port | dir | meaning |
|------|-----|---------|
| `kind_x`, `kind_y` | in | tensor kind per side |
| `mean_x`, `mean_y` | in | FP32 layer mean (used for `KIND_W`) |
| `thr_x`, `thr_y` | in | FP32 clip level (used for `KIND_A`; `0x7F800000` = none) |
| `out_frac` | in | fractional bits of `out` |
| `clear_x`, `clear_y` | in | restart a side's maximum search before a scan |
| `in_valid`, `phase`, `in_first`, `in_last` | in | beat framing |
| `x[16]`, `y[16]` | in | FP32 operands |
| `out_valid`, `out`, `z`, `overflow` | out | dot-product result |
| `beta_x`, `beta_y`, `max_abs_x`, `max_abs_y` | out | scale state, for the host |
| `n_clip_x`, `n_clip_y`, `n_underflow`, `n_saturate` | out | per-beat event counts |

Hold the set-up inputs steady while beats are in flight. Assertions check that the kinds are legal
and that a compute beat which is not `in_first` belongs to an open dot product.

**A forward step, as a host sequence.**

1. Set `kind_x = KIND_W`, `mean_x = mean(W)`, `kind_y = KIND_A`, `thr_y = +inf`.
2. Pulse `clear_x` and `clear_y`.
3. Stream all `(W, A)` beats with `PH_SCAN`.
4. Wait 3 cycles. Set `thr_y = gamma · max_abs_y`.
5. Stream every dot product with `PH_COMPUTE`, framed by `in_first` and `in_last`.
6. Collect the `out` values.

## 7. Where this follows the method and where it is this design's own

Follows the method:

* 5-bit codes with exponents in [-7, 7].
* `alpha = max|F| / 2^7` rounded to `2^beta`.
* Scaling by an exponent addition.
* Round to the nearest power of two with limits at `2^-7` and `2^7`.
* INT4 exponent add and XOR per product.
* INT32 accumulation.
* Final shift by `beta + beta'`.
* `W - mean(W)` before quantizing weights.
* Clipping to `±gamma · max|A|`.
* One quantizer and MAC scheme for all three training MACs.

Own choices, where the method says nothing:

* The zero code.
* The 14 fractional accumulator bits.
* Saturation instead of wrap-around.
* The `out_frac` output format.
* 16 lanes and the adder tree.
* The scan/compute protocol and the `cap` input of `als_beta`.
* Handling of subnormal, infinite and NaN inputs.
* Pipelining and reset.
* The rounding rule for `beta`.
* Flush-to-zero in the FP32 subtraction.

Not covered:

* The layer mean for bias correction and the scalar `gamma · max|A|` are host inputs.
* The training loop, tensor storage and weight update are outside the engine.
* The 6-bit gradient format that the method's training recipe uses for the last layer only is not
  supported. The code width is fixed at 5 bits. A 6-bit code would widen the exponent to [-15, 15].
  Against a 5-bit operand, the accumulator would then need 22 fractional bits, which leaves INT32
  only 9 integer bits.
* The shift-based product of a power of two with a fixed-point number is described alongside the
  method but is not used by it, since both operands are quantized. It is not built.

## 8. Verification

Every block has a self-checking testbench in `tb/`. Each compares the block with reference
arithmetic written independently with SystemVerilog `real`s (`tb/tb_fp_pkg.sv`). Each ends with a
`TB_RESULT checks=… failures=…` line and has a cycle watchdog.

| testbench | what it checks |
|-----------|----------------|
| `als_potq_tb` | 20 000 random values and scales plus corners: the 1.5 midpoint, `2^7` / `2^-7` limits, zero, subnormal, infinity |
| `als_beta_tb` | running maximum and `beta` over random streams, clear, idle beats, `cap`, all-zero tensor; the maximum maps to `2^7` |
| `mf_mac_tb` | 400 random dot products of 1–13 beats, zero codes, idle beats inside a product, overflow, left/right shifts, latency |
| `wbc_tb` | 30 000 random subtractions against a once-rounded FP32 reference; cancellation, binade carry, infinity, bypass |
| `prc_clip_tb` | clamping of both signs, the threshold boundary, bypass |
| `mf_train_top_tb` | end to end at the default 16 lanes. A forward step (bias-corrected W, clipped A, `gamma = 0.75`), a weight-gradient step (clipped A against G, phase switch with no gap) and a saturating step; 18 dot products of 128 products each, exact `z`, `out`, `overflow`, `beta` and the 4-cycle latency. It requires each mechanism to occur at least once. |
| `mf_layer_tb` | one ResNet-shaped 3×3×64 convolution layer at the default size: 16 forward outputs of 576 products (weights normal with a small bias, rectified activations, `gamma = 0.9`), 32 input-gradient outputs that reuse the weights' `beta` without a new scan, and 16 weight-gradient outputs over 64 positions. Every result is bit-exact against the reference. |

The references check bit-exact agreement with the definitions above. How close the 5-bit result is
to the FP32 dot product of the same data is a property of the method, not of the RTL. `mf_layer_tb`
reports it as a cosine similarity over each output vector. Measured values: about 0.80 for the
forward outputs, where the zero-mean weights make the sums small against the per-element rounding
error, and about 0.96 for both gradient MACs. The testbench fails only below 0.7, which would
indicate a scale or sign error rather than rounding noise.

## 9. Simulating

All testbenches use only `rtl/` and `tb/`. For example, with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/mf_pkg.sv tb/tb_fp_pkg.sv tb/mf_train_top_tb.sv --top-module mf_train_top_tb
    ./obj_dir/Vmf_train_top_tb

Substitute any other `*_tb` for the block of interest. `LANES` is a parameter of every block. The
package `mf_pkg` holds the code format, the accumulator fraction and the shared enums.

## Files

| file | content |
|------|---------|
| `rtl/mf_pkg.sv` | code format, constants, `pot_t`, tensor-kind and phase enums |
| `rtl/als_potq.sv` | FP32 → 5-bit power-of-two quantizer |
| `rtl/als_beta.sv` | running max and layer scale exponent |
| `rtl/mf_mac.sv` | exponent-add / XOR / INT32 accumulate / shift MAC |
| `rtl/fp32_add.sv` | FP32 adder used by the bias correction |
| `rtl/wbc.sv` | weight bias correction |
| `rtl/prc_clip.sv` | activation ratio clipping |
| `rtl/mf_operand_path.sv` | one operand side: corrections, scale, quantizers |
| `rtl/mf_train_top.sv` | the engine |
| `tb/*_tb.sv`, `tb/tb_fp_pkg.sv` | testbenches and reference arithmetic |
