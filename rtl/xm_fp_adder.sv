// xm_fp_adder: one lane of the floating-point accumulation path (Stage 3).
//
// Adds a lane product (sign, unbiased exponent, 16-bit mantissa normalised to 1.15)
// to a BF16 accumulator and rounds once to BF16:
//   1. the accumulator is unpacked (subnormal read as zero) and widened to 1.15;
//   2. the operand of smaller magnitude is shifted right by the exponent gap into a
//      field with three extra low bits, bits shifted out are ORed into the lowest one;
//   3. the mantissas are added or subtracted (effective operation from the signs);
//   4. the result is renormalised (one right shift on carry-out, otherwise a left
//      shift by its leading-zero count) and the exponent corrected;
//   5. it is rounded to 8 significant bits, round-to-nearest-even;
//   6. a biased exponent of 255 or more gives signed infinity, one of 0 or less a
//      signed zero (flush to zero). An exact zero sum is +0 unless both inputs are
//      negative.
// The product is not rounded before the addition, so the MAC rounds once per
// operation. NaN and infinity inputs are not handled here: their flags travel beside
// the datapath and Stage 4 overrides the result. Purely combinational.
// The alignment/add/LZC-normalise/RNE structure is the paper's; the single rounding,
// the field widths and the signed-zero rule are this design's choices.
module xm_fp_adder
  import xm_pkg::*;
(
  input  lane_prod_s  p,
  input  logic [15:0] c,
  output logic [15:0] sum
);
  localparam int unsigned FW = PROD_W + 3;   // mantissa + guard, round, sticky

  function automatic logic [4:0] lzc19(logic [FW-1:0] v);
    logic [4:0] n = 5'(FW);
    for (int i = 0; i < FW; i++) if (v[i]) n = 5'(FW - 1 - i);
    return n;
  endfunction

  always_comb begin
    automatic logic              cs   = c[15];
    automatic logic              cz   = (c[14:7] == 8'd0);
    automatic logic signed [EXP_W-1:0] ce = EXP_W'(signed'({4'd0, c[14:7]}) - 12'sd127);
    automatic logic [PROD_W-1:0] cm   = cz ? '0 : {1'b1, c[6:0], 8'd0};
    automatic logic signed [EXP_W-1:0] pe = p.exp;
    automatic logic [PROD_W-1:0] pm   = p.zero ? '0 : p.man;
    automatic logic              p_big;
    automatic logic              bs, ss;
    automatic logic signed [EXP_W-1:0] be, se;
    automatic logic [PROD_W-1:0] bm, sm;
    automatic logic [EXP_W-1:0]  d;
    automatic logic [FW-1:0]     lb, ls;
    automatic logic [FW:0]       s;
    automatic logic [FW-1:0]     n;
    automatic logic signed [EXP_W:0] e;
    automatic logic [8:0]        keep;
    automatic logic              g, st;
    automatic logic signed [EXP_W:0] be_out;
    automatic logic [4:0]        nz;

    // A zero operand gets the smallest exponent so it always loses the comparison.
    if (p.zero) pe = -EXP_W'(2048);
    if (cz)     ce = -EXP_W'(2048);

    p_big = (pe > ce) || (pe == ce && pm >= cm);
    bs = p_big ? p.sign : cs;   ss = p_big ? cs : p.sign;
    be = p_big ? pe : ce;       se = p_big ? ce : pe;
    bm = p_big ? pm : cm;       sm = p_big ? cm : pm;

    d  = be - se;
    lb = {bm, 3'b000};
    ls = {sm, 3'b000};
    if (d >= EXP_W'(FW)) begin
      ls = {{(FW-1){1'b0}}, |sm};
    end else begin
      automatic logic [FW-1:0] lost = ls & ((FW'(1) << d) - 1'b1);
      ls = (ls >> d) | {{(FW-1){1'b0}}, |lost};
    end

    s = (bs ^ ss) ? ({1'b0, lb} - {1'b0, ls}) : ({1'b0, lb} + {1'b0, ls});

    // Renormalise.
    nz = 5'd0;
    if (s[FW]) begin
      n = s[FW:1] | {{(FW-1){1'b0}}, s[0]};
      e = (EXP_W+1)'(be) + 1;
    end else begin
      nz = lzc19(s[FW-1:0]);
      n  = s[FW-1:0] << nz;
      e  = (EXP_W+1)'(be) - (EXP_W+1)'(nz);
    end

    // Round to nearest even at 8 significant bits (1.7).
    keep = {1'b0, n[FW-1 -: 8]};
    g    = n[FW-9];
    st   = |n[FW-10:0];
    if (g && (st || keep[0])) keep = keep + 9'd1;
    if (keep[8]) begin
      keep = keep >> 1;
      e    = e + 1;
    end

    be_out = e + (EXP_W+1)'(BF16_BIAS);
    if (s == '0)                     sum = {bs & ss, 15'd0};
    else if (be_out >= 255)          sum = {bs, 8'hFF, 7'd0};
    else if (be_out <= 0)            sum = {bs, 15'd0};
    else                             sum = {bs, be_out[7:0], keep[6:0]};
  end
endmodule
