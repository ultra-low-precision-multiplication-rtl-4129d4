// mf_train_top: multiplication-free MAC engine for training linear layers.
//
// Two operand paths (X and Y) each take LANES FP32 values per beat, preprocess them according to
// the tensor kind (weight bias correction for weights, ratio clipping for activations, nothing for
// gradients), find the layer-wise scale exponent beta and quantize to 5-bit PoT codes. One MF-MAC
// multiplies the code pairs with exponent additions and sign XORs, accumulates in INT32 and shifts
// the sum by beta_x + beta_y. The same engine serves the three MACs of training:
// forward (X = W, Y = A), gradient propagation (X = W, Y = G) and weight gradient (X = A, Y = G).
//
// Use: stream a tensor with phase = PH_SCAN to set its beta (pulse clear_x / clear_y first), then
// stream the operand pairs again with phase = PH_COMPUTE; in_first / in_last delimit one dot
// product. A side whose beta is already known (e.g. weights reused in backward) needs no new scan.
// The phase may change between consecutive beats: a beat's beta contributions are visible to the
// next beat.
//
// Timing: input registered (stage 1), preprocessing registered (stage 2), PoT codes registered
// (stage 3), accumulator and result (stage 4): out_valid rises 4 clock edges after the edge that
// samples the in_last beat. One beat per cycle, no stalls. out has out_frac fractional bits
// (out_frac = 14 gives the plain shift by beta_x + beta_y). Reset is asynchronous, active low.
//
// The datapath follows the described method; pipelining, the two-pass scan/compute protocol, the
// per-layer mean and clip level as inputs, and LANES = 16 are choices of this design.
module mf_train_top
  import mf_pkg::*;
#(
  parameter int unsigned LANES = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // operation set-up (hold while beats are in flight)
  input  opnd_kind_e                 kind_x,
  input  opnd_kind_e                 kind_y,
  input  fp32_t                      mean_x,
  input  fp32_t                      mean_y,
  input  fp32_t                      thr_x,
  input  fp32_t                      thr_y,
  input  logic signed [7:0]          out_frac,
  input  logic                       clear_x,
  input  logic                       clear_y,
  // beat stream
  input  logic                       in_valid,
  input  phase_e                     phase,
  input  logic                       in_first,
  input  logic                       in_last,
  input  fp32_t                      x [LANES],
  input  fp32_t                      y [LANES],
  // results
  output logic                       out_valid,
  output logic signed [31:0]         out,
  output logic signed [31:0]         z,
  output logic                       overflow,
  output beta_t                      beta_x,
  output beta_t                      beta_y,
  output logic [30:0]                max_abs_x,
  output logic [30:0]                max_abs_y,
  // per-beat event counts (stage 2)
  output logic [$clog2(LANES+1)-1:0] n_clip_x,
  output logic [$clog2(LANES+1)-1:0] n_clip_y,
  output logic [$clog2(LANES+1)-1:0] n_underflow,
  output logic [$clog2(LANES+1)-1:0] n_saturate
);

  localparam int unsigned CW = $clog2(LANES + 1);

  // ---- stage 1: input register ----
  logic   s1_valid, s1_first, s1_last;
  phase_e s1_phase;
  fp32_t  s1_x [LANES];
  fp32_t  s1_y [LANES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_last  <= 1'b0;
      s1_phase <= PH_SCAN;
      for (int i = 0; i < LANES; i++) begin
        s1_x[i] <= '0;
        s1_y[i] <= '0;
      end
    end else begin
      s1_valid <= in_valid;
      if (in_valid) begin
        s1_first <= in_first;
        s1_last  <= in_last;
        s1_phase <= phase;
        s1_x     <= x;
        s1_y     <= y;
      end
    end
  end

  // ---- stage 2/3: operand paths ----
  pot_t qx [LANES];
  pot_t qy [LANES];
  logic [CW-1:0] uf_x, uf_y, sat_x, sat_y;

  mf_operand_path #(.LANES(LANES)) u_px (
    .clk, .rst_n,
    .kind        (kind_x),
    .mean        (mean_x),
    .thr         (thr_x),
    .clear       (clear_x),
    .s1_valid    (s1_valid),
    .s1_phase    (s1_phase),
    .s1_data     (s1_x),
    .q           (qx),
    .beta        (beta_x),
    .max_abs     (max_abs_x),
    .n_clip      (n_clip_x),
    .n_underflow (uf_x),
    .n_saturate  (sat_x)
  );

  mf_operand_path #(.LANES(LANES)) u_py (
    .clk, .rst_n,
    .kind        (kind_y),
    .mean        (mean_y),
    .thr         (thr_y),
    .clear       (clear_y),
    .s1_valid    (s1_valid),
    .s1_phase    (s1_phase),
    .s1_data     (s1_y),
    .q           (qy),
    .beta        (beta_y),
    .max_abs     (max_abs_y),
    .n_clip      (n_clip_y),
    .n_underflow (uf_y),
    .n_saturate  (sat_y)
  );

  assign n_underflow = uf_x + uf_y;
  assign n_saturate  = sat_x + sat_y;

  // control flags travel alongside the operand pipeline
  logic   s2_valid, s2_first, s2_last, s3_valid, s3_first, s3_last;
  phase_e s2_phase;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {s2_valid, s2_first, s2_last, s3_valid, s3_first, s3_last} <= '0;
      s2_phase <= PH_SCAN;
    end else begin
      s2_valid <= s1_valid;
      s2_first <= s1_first;
      s2_last  <= s1_last;
      s2_phase <= s1_phase;
      s3_valid <= s2_valid && s2_phase == PH_COMPUTE;
      s3_first <= s2_first;
      s3_last  <= s2_last;
    end
  end

  // ---- stage 4: MF-MAC ----
  mf_mac #(.LANES(LANES)) u_mac (
    .clk, .rst_n,
    .in_valid  (s3_valid),
    .in_first  (s3_first),
    .in_last   (s3_last),
    .a         (qx),
    .b         (qy),
    .beta_a    (beta_x),
    .beta_b    (beta_y),
    .out_frac  (out_frac),
    .out_valid (out_valid),
    .out       (out),
    .z_out     (z),
    .overflow  (overflow)
  );

  // Only the three tensor kinds exist.
  a_kind_x: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> kind_x != 2'd3);
  a_kind_y: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> kind_y != 2'd3);
  // A dot product starts before it ends: in_last on a beat that is not first needs a running one.
  logic open_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                      open_q <= 1'b0;
    else if (in_valid && phase == PH_COMPUTE)        open_q <= !in_last;
  end
  a_first: assert property (@(posedge clk) disable iff (!rst_n)
                            (in_valid && phase == PH_COMPUTE && !in_first) |-> open_q);

endmodule
