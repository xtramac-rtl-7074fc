// xm_map: mapping submodule of Stage 1 for one datatype combination.
//
// Decodes the packed operands A and B as the datatype DT defines them, and builds the
// DSP-port operands and the per-lane metadata:
//   * floating-point values (BF16, FP8 E4M3, FP4 E2M1): sign, exponent and fraction
//     are split, the implicit leading one is restored, subnormals are read as zero
//     (denormals-are-zero), all-ones exponents give infinity/NaN as the format defines;
//   * integers (INT4, INT8): two's complement is turned into sign and magnitude; the
//     magnitude has exponent 0.
// The unsigned mantissas/magnitudes of A are placed on the 27-bit DSP A port at
// offsets 0 and PB*S, those of B on the 18-bit B port at offsets 0 and S, so that the
// multiplier returns lane product k = i*PB + j at bit k*S (S from xm_pkg::pack_of).
// Each lane's metadata is the product sign (XOR), the product scale (sum of both
// operands' LSB exponents) and its special-value flags (NaN, infinity, zero;
// inf x 0 gives NaN). Purely combinational; Stage 1 registers the result.
// Operand layout: value i of A at A[i*WA +: WA], value j of B at B[j*WB +: WB].
// The paper gives the decode/pack steps; the exact offsets and the E2M1 handling of
// exponent 11 (finite, since E2M1 encodes neither infinity nor NaN) are this
// design's choices.
module xm_map
  import xm_pkg::*;
#(
  parameter dtype_e DT = DT_BF16_BF16
) (
  input  logic [A_W-1:0]     a,
  input  logic [B_W-1:0]     b,
  output logic [DSP_A_W-1:0] dsp_a,
  output logic [DSP_B_W-1:0] dsp_b,
  output lane_meta_s         meta [MAX_LANES]
);

  // Operand formats of this datatype combination.
  function automatic fmt_e fmt_a_of(dtype_e dt);
    unique case (dt)
      DT_INT4_BF16: return FMT_INT4;
      DT_FP4_BF16:  return FMT_FP4;
      DT_FP8_FP8:   return FMT_FP8;
      DT_INT8_INT8: return FMT_INT8;
      default:      return FMT_BF16;
    endcase
  endfunction

  function automatic fmt_e fmt_b_of(dtype_e dt);
    unique case (dt)
      DT_FP8_FP8:   return FMT_FP8;
      DT_INT8_INT8: return FMT_INT8;
      default:      return FMT_BF16;
    endcase
  endfunction

  function automatic int unsigned width_of(fmt_e f);
    unique case (f)
      FMT_BF16: return 16;
      FMT_FP8:  return 8;
      FMT_INT8: return 8;
      default:  return 4;
    endcase
  endfunction

  // Decode one value of format f held in the low bits of x.
  function automatic operand_s decode(fmt_e f, logic [15:0] x);
    operand_s o;
    logic [7:0] e;
    o = '0;
    unique case (f)
      FMT_BF16: begin
        e = x[14:7];
        o.sign       = x[15];
        o.flags.zero = (e == 8'd0);
        o.flags.inf  = (e == 8'hFF) && (x[6:0] == 7'd0);
        o.flags.nan  = (e == 8'hFF) && (x[6:0] != 7'd0);
        o.mag        = (e == 8'd0 || e == 8'hFF) ? 8'd0 : {1'b1, x[6:0]};
        o.scale      = EXP_W'(signed'({4'd0, e}) - 12'sd134);   // e - 127 - 7
      end
      FMT_FP8: begin
        // E4M3 has no infinity: an all-ones exponent is NaN.
        e = {4'd0, x[6:3]};
        o.sign       = x[7];
        o.flags.zero = (e == 8'd0);
        o.flags.nan  = (e == 8'd15);
        o.mag        = (e == 8'd0 || e == 8'd15) ? 8'd0 : {4'd0, 1'b1, x[2:0]};
        o.scale      = EXP_W'(signed'({4'd0, e}) - 12'sd10);    // e - 7 - 3
      end
      FMT_FP4: begin
        e = {6'd0, x[2:1]};
        o.sign       = x[3];
        o.flags.zero = (e == 8'd0);
        o.mag        = (e == 8'd0) ? 8'd0 : {6'd0, 1'b1, x[0]};
        o.scale      = EXP_W'(signed'({4'd0, e}) - 12'sd2);     // e - 1 - 1
      end
      FMT_INT4: begin
        o.sign       = x[3];
        o.mag        = x[3] ? 8'(4'(-x[3:0])) : {4'd0, x[3:0]};
        o.flags.zero = (x[3:0] == 4'd0);
        o.scale      = '0;
      end
      default: begin  // FMT_INT8
        o.sign       = x[7];
        o.mag        = x[7] ? 8'(-x[7:0]) : x[7:0];
        o.flags.zero = (x[7:0] == 8'd0);
        o.scale      = '0;
      end
    endcase
    return o;
  endfunction

  localparam pack_s       PK    = pack_of(DT);
  localparam fmt_e        FA    = fmt_a_of(DT);
  localparam fmt_e        FB    = fmt_b_of(DT);
  localparam int unsigned WA    = width_of(FA);
  localparam int unsigned WB    = width_of(FB);
  localparam int unsigned NPA   = 32'(PK.pa);
  localparam int unsigned NPB   = 32'(PK.pb);
  localparam int unsigned S     = 32'(PK.stride);

  operand_s opa [2];
  operand_s opb [2];

  always_comb begin
    for (int i = 0; i < 2; i++) begin
      opa[i] = (i < NPA) ? decode(FA, 16'(a[i*WA +: WA])) : '0;
      opb[i] = (i < NPB) ? decode(FB, 16'(b[i*WB +: WB])) : '0;
    end

    dsp_a = '0;
    dsp_b = '0;
    for (int i = 0; i < 2; i++) begin
      if (i < NPA) dsp_a = dsp_a | (DSP_A_W'(opa[i].mag) << (i * NPB * S));
      if (i < NPB) dsp_b = dsp_b | (DSP_B_W'(opb[i].mag) << (i * S));
    end

    for (int k = 0; k < MAX_LANES; k++) begin
      meta[k] = '0;
      if (k < int'(PK.lanes)) begin
        automatic operand_s x = opa[k / NPB];
        automatic operand_s y = opb[k % NPB];
        meta[k].sign       = x.sign ^ y.sign;
        meta[k].scale      = x.scale + y.scale;
        meta[k].flags.nan  = x.flags.nan | y.flags.nan
                           | (x.flags.inf & y.flags.zero) | (x.flags.zero & y.flags.inf);
        meta[k].flags.inf  = (x.flags.inf | y.flags.inf) & ~meta[k].flags.nan;
        meta[k].flags.zero = (x.flags.zero | y.flags.zero)
                           & ~meta[k].flags.nan & ~meta[k].flags.inf;
      end
    end
  end

endmodule
