// xtramac: the datatype-adaptive multiply-accumulate unit, P = A x B + C.
//
// Every supported datatype combination (xm_pkg::dtype_e) is reduced to one unsigned
// integer mantissa product on a single 27x18 multiplier, with signs and exponents
// handled beside it. Several low-precision lanes share the multiplier by being packed
// into disjoint bit ranges of its ports. The pipeline has four logical stages:
//   Stage 1  operand interpretation and DSP packing (xm_stage1)
//   Stage 2  the multiplier (xm_dsp_mul) and per-lane post-compute (xm_stage2)
//   Stage 3  decoupled INT and FP accumulation banks (xm_stage3)
//   Stage 4  special-value override and output selection (xm_stage4)
// each ending in a register. With EXTRA_S1..EXTRA_S4 = 0 the latency is 4 cycles:
// operands presented at rising edge t give p at edge t+4. Each EXTRA_Sn adds register
// slices after stage n (latency 4 + sum of EXTRA_Sn); the datatype select, C and
// the valid bit travel through matched delay slices, so the initiation interval is
// always one and the datatype may change every cycle with no bubble.
// Interface: dtype, a (32 b), b (16 b) and c (64 b) with in_valid; p (64 b) with
// out_valid. Lane layouts are given in xm_pkg and xm_map. DT_EN selects the
// datatypes built (N in the paper); the lane count P follows from it. The valid bit is
// this design's addition (reset to 0 by the active-low rst_n); the paper specifies
// only the fixed latency and II.
module xtramac
  import xm_pkg::*;
#(
  parameter logic [NUM_DT-1:0] DT_EN   = '1,
  parameter int unsigned       EXTRA_S1 = 0,
  parameter int unsigned       EXTRA_S2 = 0,
  parameter int unsigned       EXTRA_S3 = 0,
  parameter int unsigned       EXTRA_S4 = 0
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  dtype_e         dtype,
  input  logic [A_W-1:0] a,
  input  logic [B_W-1:0] b,
  input  logic [C_W-1:0] c,
  output logic           out_valid,
  output logic [P_W-1:0] p
);
  localparam int unsigned LANES  = lanes_of_mask(DT_EN);
  localparam bit          INT_EN = DT_EN[DT_INT8_INT8];
  localparam bit          FP_EN  = |(DT_EN & ~(NUM_DT'(1) << DT_INT8_INT8));
  localparam int unsigned LAT    = 4 + EXTRA_S1 + EXTRA_S2 + EXTRA_S3 + EXTRA_S4;

  // ---------------------------------------------------------------- valid
  logic [LAT-1:0] vld;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[LAT-2:0], in_valid};
  end
  assign out_valid = vld[LAT-1];

  // ---------------------------------------------------------------- stage 1
  logic [DSP_A_W-1:0] s1_a, r1_a;
  logic [DSP_B_W-1:0] s1_b, r1_b;
  lane_meta_s         s1_meta [MAX_LANES];
  lane_meta_s         r1_meta [MAX_LANES];
  dtype_e             r1_dt;
  logic [C_W-1:0]     r1_c;

  xm_stage1 #(.DT_EN(DT_EN)) u_s1 (
    .dtype (dtype), .a (a), .b (b),
    .dsp_a (s1_a), .dsp_b (s1_b), .meta (s1_meta)
  );

  localparam int unsigned M_W = $bits(lane_meta_s) * MAX_LANES;
  logic [M_W-1:0] s1_meta_flat, r1_meta_flat;
  always_comb for (int k = 0; k < MAX_LANES; k++) begin
    s1_meta_flat[k*$bits(lane_meta_s) +: $bits(lane_meta_s)] = s1_meta[k];
    r1_meta[k] = r1_meta_flat[k*$bits(lane_meta_s) +: $bits(lane_meta_s)];
  end

  localparam int unsigned R1_W = DSP_A_W + DSP_B_W + M_W + 3 + C_W;
  xm_delay #(.WIDTH(R1_W), .DEPTH(1 + EXTRA_S1)) u_r1 (
    .clk (clk),
    .d   ({s1_a, s1_b, s1_meta_flat, dtype, c}),
    .q   ({r1_a, r1_b, r1_meta_flat, r1_dt, r1_c})
  );

  // ---------------------------------------------------------------- stage 2
  logic [DSP_P_W-1:0] s2_prod;
  lane_prod_s         s2_lp [MAX_LANES];
  lane_prod_s         r2_lp [MAX_LANES];
  dtype_e             r2_dt;
  logic [C_W-1:0]     r2_c;

  xm_dsp_mul #(.LA(DSP_A_W), .LB(DSP_B_W)) u_mul (.a (r1_a), .b (r1_b), .p (s2_prod));

  xm_stage2 u_s2 (.dtype (r1_dt), .prod (s2_prod), .meta (r1_meta), .lp (s2_lp));

  localparam int unsigned L_W = $bits(lane_prod_s) * MAX_LANES;
  logic [L_W-1:0] s2_lp_flat, r2_lp_flat;
  always_comb for (int k = 0; k < MAX_LANES; k++) begin
    s2_lp_flat[k*$bits(lane_prod_s) +: $bits(lane_prod_s)] = (k < LANES) ? s2_lp[k] : '0;
    r2_lp[k] = r2_lp_flat[k*$bits(lane_prod_s) +: $bits(lane_prod_s)];
  end

  xm_delay #(.WIDTH(L_W + 3 + C_W), .DEPTH(1 + EXTRA_S2)) u_r2 (
    .clk (clk),
    .d   ({s2_lp_flat, r1_dt, r1_c}),
    .q   ({r2_lp_flat, r2_dt, r2_c})
  );

  // ---------------------------------------------------------------- stage 3
  logic [P_W-1:0] s3_int, s3_fp, r3_int, r3_fp;
  lane_sv_s       s3_sv [MAX_LANES];
  lane_sv_s       r3_sv [MAX_LANES];
  dtype_e         r3_dt;

  xm_stage3 #(.LANES(LANES), .INT_EN(INT_EN), .FP_EN(FP_EN)) u_s3 (
    .lp (r2_lp), .c (r2_c), .int_word (s3_int), .fp_word (s3_fp), .sv (s3_sv)
  );

  localparam int unsigned V_W = $bits(lane_sv_s) * MAX_LANES;
  logic [V_W-1:0] s3_sv_flat, r3_sv_flat;
  always_comb for (int k = 0; k < MAX_LANES; k++) begin
    s3_sv_flat[k*$bits(lane_sv_s) +: $bits(lane_sv_s)] = s3_sv[k];
    r3_sv[k] = r3_sv_flat[k*$bits(lane_sv_s) +: $bits(lane_sv_s)];
  end

  xm_delay #(.WIDTH(2*P_W + V_W + 3), .DEPTH(1 + EXTRA_S3)) u_r3 (
    .clk (clk),
    .d   ({s3_int, s3_fp, s3_sv_flat, r2_dt}),
    .q   ({r3_int, r3_fp, r3_sv_flat, r3_dt})
  );

  // ---------------------------------------------------------------- stage 4
  logic [P_W-1:0] s4_p;

  xm_stage4 u_s4 (
    .dtype (r3_dt), .int_word (r3_int), .fp_word (r3_fp), .sv (r3_sv), .p (s4_p)
  );

  xm_delay #(.WIDTH(P_W), .DEPTH(1 + EXTRA_S4)) u_r4 (.clk (clk), .d (s4_p), .q (p));

endmodule
