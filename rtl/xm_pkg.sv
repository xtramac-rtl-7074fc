// xm_pkg: types and constants shared by the XtraMAC datapath and the GEMV engine.
//
// The MAC computes P = A x B + C on up to MAX_LANES packed lanes. Every supported
// datatype combination is reduced to an unsigned integer mantissa product (done by one
// 27x18 multiplier) plus separate sign and exponent handling. This package defines
// the datatype codes, the operand field layouts, the per-datatype DSP packing strides
// and the records that travel between the four pipeline stages.
//
// Datatype set: the union of the four runtime-switching configurations the design is
// evaluated with (BF16xBF16+BF16, INT4xBF16+BF16, FP4(E2M1)xBF16+BF16,
// FP8(E4M3)xFP8+BF16, INT8xINT8+INT32). Floating-point outputs are BF16.
//
// Lane formation (this design's reading of the packing equations): the DSP A port
// carries PA multiplicands at stride PB*S, the B port PB multiplicands at stride S,
// and the PA*PB cross products a_i*b_j land at (i*PB + j)*S. Lane k = i*PB + j. With
// PB = 1 the B operand is shared by all lanes (weights in A, activation in B).
// This reproduces the published parallelism of every datatype (2 for BF16, INT8,
// INT4xBF16, FP4xBF16; 4 for FP8xFP8).
package xm_pkg;

  // ---------------------------------------------------------------- datatypes
  typedef enum logic [2:0] {
    DT_BF16_BF16 = 3'd0,  // BF16 x BF16 + BF16 -> BF16, 2 lanes
    DT_INT4_BF16 = 3'd1,  // INT4 x BF16 + BF16 -> BF16, 2 lanes
    DT_FP4_BF16  = 3'd2,  // FP4 (E2M1) x BF16 + BF16 -> BF16, 2 lanes
    DT_FP8_FP8   = 3'd3,  // FP8 (E4M3) x FP8 (E4M3) + BF16 -> BF16, 4 lanes (2x2 outer product)
    DT_INT8_INT8 = 3'd4   // INT8 x INT8 + INT32 -> INT32, 2 lanes
  } dtype_e;

  localparam int unsigned NUM_DT    = 5;
  localparam int unsigned MAX_LANES = 4;

  // DSP48E2 multiplier port widths.
  localparam int unsigned DSP_A_W = 27;
  localparam int unsigned DSP_B_W = 18;
  localparam int unsigned DSP_P_W = DSP_A_W + DSP_B_W;

  // External operand widths.
  localparam int unsigned A_W = 32;   // packed multiplicand A
  localparam int unsigned B_W = 16;   // packed multiplicand B
  localparam int unsigned C_W = 64;   // packed accumulator C
  localparam int unsigned P_W = 64;   // packed result

  // Width of the largest lane product magnitude (8-bit x 8-bit).
  localparam int unsigned PROD_W = 16;
  // Signed exponent width used between stages (covers BF16xBF16 product range).
  localparam int unsigned EXP_W = 12;

  // BF16 constants.
  localparam int signed  BF16_BIAS = 127;
  localparam logic [15:0] BF16_QNAN = 16'h7FC0;

  // Per-datatype packing description.
  typedef struct packed {
    logic [2:0] lanes;   // P of this datatype
    logic [1:0] pa;      // values packed on the DSP A port
    logic [1:0] pb;      // values packed on the DSP B port
    logic [4:0] stride;  // S = product width + 1 guard bit
    logic [4:0] pw;      // lane product width (mask width)
    logic       is_int;  // integer accumulation path
  } pack_s;

  function automatic pack_s pack_of(dtype_e dt);
    pack_s r;
    unique case (dt)
      DT_BF16_BF16: r = '{lanes: 3'd2, pa: 2'd2, pb: 2'd1, stride: 5'd17, pw: 5'd16, is_int: 1'b0};
      DT_INT4_BF16: r = '{lanes: 3'd2, pa: 2'd2, pb: 2'd1, stride: 5'd13, pw: 5'd12, is_int: 1'b0};
      DT_FP4_BF16:  r = '{lanes: 3'd2, pa: 2'd2, pb: 2'd1, stride: 5'd11, pw: 5'd10, is_int: 1'b0};
      DT_FP8_FP8:   r = '{lanes: 3'd4, pa: 2'd2, pb: 2'd2, stride: 5'd9,  pw: 5'd8,  is_int: 1'b0};
      DT_INT8_INT8: r = '{lanes: 3'd2, pa: 2'd2, pb: 2'd1, stride: 5'd17, pw: 5'd16, is_int: 1'b1};
      default:      r = '{lanes: 3'd2, pa: 2'd2, pb: 2'd1, stride: 5'd17, pw: 5'd16, is_int: 1'b0};
    endcase
    return r;
  endfunction

  // Maximum lane count over an enable mask of datatypes (bit i enables dtype_e'(i)).
  function automatic int unsigned lanes_of_mask(logic [NUM_DT-1:0] en);
    int unsigned m = 1;
    for (int i = 0; i < NUM_DT; i++)
      if (en[i] && 32'(pack_of(dtype_e'(i)).lanes) > m) m = 32'(pack_of(dtype_e'(i)).lanes);
    return m;
  endfunction

  // ---------------------------------------------------------------- records
  // Special-value status of one operand or one lane product.
  typedef struct packed {
    logic nan;
    logic inf;
    logic zero;
  } sv_flags_s;

  // Per-lane metadata leaving Stage 1: product sign and the power of two of the
  // product's LSB (sum of both operands' scale exponents), plus special flags.
  typedef struct packed {
    logic              sign;
    logic [EXP_W-1:0]  scale;  // signed
    sv_flags_s         flags;
  } lane_meta_s;

  // Per-lane product leaving Stage 2.
  typedef struct packed {
    logic              sign;
    logic              zero;
    logic [EXP_W-1:0]  exp;    // signed, unbiased; value = 1.man[14:0] * 2^exp
    logic [PROD_W-1:0] man;    // normalised, man[15] = 1 unless zero
    logic [PROD_W:0]   ival;   // signed integer product (integer datatypes)
    sv_flags_s         flags;
  } lane_prod_s;

  // Special-value status of one lane carried from Stage 3 to Stage 4: the product's
  // flags and sign, and the accumulator's.
  typedef struct packed {
    logic p_nan;
    logic p_inf;
    logic p_sign;
    logic c_nan;
    logic c_inf;
    logic c_sign;
  } lane_sv_s;

  // Operand formats seen by the mapping stage.
  typedef enum logic [2:0] {
    FMT_BF16 = 3'd0,
    FMT_FP8  = 3'd1,   // E4M3
    FMT_FP4  = 3'd2,   // E2M1
    FMT_INT4 = 3'd3,
    FMT_INT8 = 3'd4
  } fmt_e;

  // One decoded operand: sign, unsigned mantissa / magnitude with the implicit one
  // restored, and the power of two of the magnitude's LSB.
  typedef struct packed {
    logic             sign;
    logic [7:0]       mag;
    logic [EXP_W-1:0] scale;  // signed
    sv_flags_s        flags;
  } operand_s;

endpackage
