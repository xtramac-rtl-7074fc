// xm_stage3: Stage 3 of the MAC, datatype-specific accumulation.
//
// Two decoupled adder banks work on every lane in every cycle: MAX_LANES saturating
// INT32 adders (xm_int_adder) and MAX_LANES BF16 adders (xm_fp_adder). Each bank's
// lane results are combined into one packed word: int_word holds lane k at
// [32k +: 32] (lanes 0 and 1), fp_word holds lane k at [16k +: 16]. The accumulator C
// is read with the same layout. Stage 4 chooses between the two words with the
// datatype select. Alongside, each lane's special-value status (product flags and
// sign, NaN/infinity of the BF16 accumulator) is collected for Stage 4.
// INT_EN and FP_EN drop a bank when no enabled datatype needs it, and LANES drops
// unused lanes; their outputs are then zero. Purely combinational.
// Separate INT and FP adders follow the paper; the packed layouts are this design's.
module xm_stage3
  import xm_pkg::*;
#(
  parameter int unsigned LANES  = MAX_LANES,
  parameter bit          INT_EN = 1'b1,
  parameter bit          FP_EN  = 1'b1
) (
  input  lane_prod_s     lp [MAX_LANES],
  input  logic [C_W-1:0] c,
  output logic [P_W-1:0] int_word,
  output logic [P_W-1:0] fp_word,
  output lane_sv_s       sv [MAX_LANES]
);
  logic [31:0] isum [2];
  logic [15:0] fsum [MAX_LANES];

  for (genvar k = 0; k < 2; k++) begin : g_int
    if (INT_EN && k < LANES) begin : g_on
      xm_int_adder u_add (
        .prod (lp[k].ival),
        .c    (c[32*k +: 32]),
        .sum  (isum[k])
      );
    end else begin : g_off
      assign isum[k] = '0;
    end
  end

  for (genvar k = 0; k < MAX_LANES; k++) begin : g_fp
    if (FP_EN && k < LANES) begin : g_on
      xm_fp_adder u_add (
        .p   (lp[k]),
        .c   (c[16*k +: 16]),
        .sum (fsum[k])
      );
    end else begin : g_off
      assign fsum[k] = '0;
    end
  end

  always_comb begin
    int_word = {isum[1], isum[0]};
    fp_word  = {fsum[3], fsum[2], fsum[1], fsum[0]};
    for (int k = 0; k < MAX_LANES; k++) begin
      automatic logic [15:0] ck = c[16*k +: 16];
      sv[k].p_nan  = lp[k].flags.nan;
      sv[k].p_inf  = lp[k].flags.inf;
      sv[k].p_sign = lp[k].sign;
      sv[k].c_nan  = (ck[14:7] == 8'hFF) && (ck[6:0] != 7'd0);
      sv[k].c_inf  = (ck[14:7] == 8'hFF) && (ck[6:0] == 7'd0);
      sv[k].c_sign = ck[15];
    end
  end
endmodule
