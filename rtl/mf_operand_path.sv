// mf_operand_path: preprocessing and quantization of one MAC operand (LANES FP32 values per beat).
//
// Depending on the tensor kind, each value first goes through weight bias correction (weights),
// ratio clipping (activations) or nothing (gradients); the result is registered. In the scan phase
// the registered values are folded into the layer maximum of an als_beta unit; in the compute phase
// they are quantized by LANES als_potq units with that unit's beta and registered again as 5-bit
// PoT codes.
//
// Interface and timing: a beat entering pre_* is registered into stage 2 on the next edge; in the
// compute phase its PoT codes appear on q one edge later (q_valid). clear resets the maximum. The
// beta unit's bound is the clip level for activations, so beta matches the clipped tensor. Event
// outputs count the lanes of the current stage-2 beat that were clipped, flushed to zero or limited
// to 2^7 (counts, for monitoring).
module mf_operand_path
  import mf_pkg::*;
#(
  parameter int unsigned LANES = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  opnd_kind_e                 kind,
  input  fp32_t                      mean,
  input  fp32_t                      thr,
  input  logic                       clear,
  // stage 1 (already registered by the caller)
  input  logic                       s1_valid,
  input  phase_e                     s1_phase,
  input  fp32_t                      s1_data [LANES],
  // stage 2 -> 3
  output pot_t                       q [LANES],
  output beta_t                      beta,
  output logic [30:0]                max_abs,
  output logic [$clog2(LANES+1)-1:0] n_clip,
  output logic [$clog2(LANES+1)-1:0] n_underflow,
  output logic [$clog2(LANES+1)-1:0] n_saturate
);

  localparam int unsigned CW = $clog2(LANES + 1);

  fp32_t pre      [LANES];
  fp32_t s2_data  [LANES];
  logic  clip_l   [LANES];
  logic  clip_s2  [LANES];
  logic  s2_valid;
  phase_e s2_phase;
  pot_t  q_c      [LANES];
  logic  uf       [LANES];
  logic  sat      [LANES];

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    fp32_t w_corr;
    wbc u_wbc (
      .enable (kind == KIND_W),
      .w      (s1_data[i]),
      .mean   (mean),
      .w_corr (w_corr)
    );
    prc_clip u_clip (
      .enable  (kind == KIND_A),
      .a       (w_corr),
      .thr     (thr),
      .a_clip  (pre[i]),
      .clipped (clip_l[i])
    );
    als_potq u_q (
      .x         (s2_data[i]),
      .beta      (beta),
      .q         (q_c[i]),
      .underflow (uf[i]),
      .saturate  (sat[i])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_valid <= 1'b0;
      s2_phase <= PH_SCAN;
      for (int i = 0; i < LANES; i++) begin
        s2_data[i] <= '0;
        clip_s2[i] <= 1'b0;
        q[i]       <= '{s: 1'b0, e: EXP_ZERO};
      end
    end else begin
      s2_valid <= s1_valid;
      if (s1_valid) begin
        s2_phase <= s1_phase;
        for (int i = 0; i < LANES; i++) begin
          s2_data[i] <= pre[i];
          clip_s2[i] <= clip_l[i];
        end
      end
      if (s2_valid && s2_phase == PH_COMPUTE) begin
        for (int i = 0; i < LANES; i++) q[i] <= q_c[i];
      end
    end
  end

  als_beta #(.LANES(LANES)) u_beta (
    .clk      (clk),
    .rst_n    (rst_n),
    .clear    (clear),
    .in_valid (s2_valid && s2_phase == PH_SCAN),
    .in_data  (s2_data),
    .cap      ((kind == KIND_A) ? thr[30:0] : 31'h7FFF_FFFF),
    .max_abs  (max_abs),
    .beta     (beta)
  );

  always_comb begin
    n_clip      = '0;
    n_underflow = '0;
    n_saturate  = '0;
    if (s2_valid) begin
      for (int i = 0; i < LANES; i++) begin
        n_clip += CW'(clip_s2[i]);
        if (s2_phase == PH_COMPUTE) begin
          n_underflow += CW'(uf[i]);
          n_saturate  += CW'(sat[i]);
        end
      end
    end
  end

endmodule
