// xm_stage2: post-compute part of Stage 2, per-lane product reconstruction.
//
// Takes the wide DSP product (all packed lanes in one bit field) and rebuilds up to
// MAX_LANES logical lane products. For lane k the datatype's stride S places the
// product at bit k*S; the lane is recovered with a fixed shift and a mask of S bits
// (product width plus one guard bit). Floating-point lanes then count leading zeros,
// shift the mantissa left until bit 15 is one and set the exponent to
// scale + 15 - LZC, so that value = 1.man[14:0] * 2^exp; the product sign is the XOR
// formed in Stage 1. Integer lanes only apply the sign to the magnitude. Lanes the
// datatype does not use are zero. Purely combinational: the multiplier and this logic
// together form Stage 2 and are followed by the Stage 2 register.
// The shift/mask/normalise structure follows the paper; the stride values and the
// 16-bit normalised mantissa format are this design's choices.
module xm_stage2
  import xm_pkg::*;
(
  input  dtype_e             dtype,
  input  logic [DSP_P_W-1:0] prod,
  input  lane_meta_s         meta [MAX_LANES],
  output lane_prod_s         lp   [MAX_LANES]
);

  function automatic logic [4:0] lzc16(logic [15:0] v);
    logic [4:0] n = 5'd16;
    for (int i = 0; i < 16; i++) if (v[i]) n = 5'(15 - i);
    return n;
  endfunction

  pack_s pk;
  assign pk = pack_of(dtype);

  always_comb begin
    for (int k = 0; k < MAX_LANES; k++) begin
      automatic logic [DSP_P_W-1:0] sh   = prod >> (k * int'(pk.stride));
      automatic logic [PROD_W:0]    raw  = (PROD_W+1)'(sh & ((DSP_P_W'(1) << pk.stride) - 1'b1));
      automatic logic [PROD_W-1:0] m     = raw[PROD_W-1:0];
      automatic logic [4:0]        nz    = lzc16(m);
      lp[k] = '0;
      if (k < int'(pk.lanes)) begin
        lp[k].sign  = meta[k].sign;
        lp[k].flags = meta[k].flags;
        lp[k].zero  = (m == '0) | meta[k].flags.zero;
        lp[k].man   = m << nz;
        lp[k].exp   = meta[k].scale + EXP_W'(15) - EXP_W'(nz);
        lp[k].ival  = meta[k].sign ? -(PROD_W+1)'(m) : (PROD_W+1)'(m);
      end
    end
  end

endmodule
