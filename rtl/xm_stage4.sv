// xm_stage4: Stage 4 of the MAC, special-value handling and output selection.
//
// For each floating-point lane the special-value status that travelled beside the
// datapath selects the final value combinationally:
//   NaN if the product was NaN (NaN input or inf x 0), C was NaN, or an infinite
//   product meets an infinite C of the other sign (inf - inf) -> canonical qNaN 7FC0;
//   otherwise infinity with its sign if the product or C is infinite;
//   otherwise the adder result (which itself saturates to infinity on overflow).
// The datatype select then takes the integer word for INT8xINT8 and the BF16 word
// otherwise, and clears the lanes the datatype does not use. Output layout: BF16 lane
// k at [16k +: 16], INT32 lane k at [32k +: 32]. Purely combinational; the MAC adds the
// final register slice. The selection rules are the paper's; 7FC0 as the canonical
// qNaN and zeroing of unused lanes are this design's choices.
module xm_stage4
  import xm_pkg::*;
(
  input  dtype_e         dtype,
  input  logic [P_W-1:0] int_word,
  input  logic [P_W-1:0] fp_word,
  input  lane_sv_s       sv [MAX_LANES],
  output logic [P_W-1:0] p
);
  pack_s pk;
  assign pk = pack_of(dtype);

  always_comb begin
    automatic logic [P_W-1:0] f = '0;
    for (int k = 0; k < MAX_LANES; k++) begin
      automatic logic [15:0] v = fp_word[16*k +: 16];
      automatic logic nan = sv[k].p_nan | sv[k].c_nan
                          | (sv[k].p_inf & sv[k].c_inf & (sv[k].p_sign != sv[k].c_sign));
      if (nan)              v = BF16_QNAN;
      else if (sv[k].p_inf) v = {sv[k].p_sign, 15'h7F80};
      else if (sv[k].c_inf) v = {sv[k].c_sign, 15'h7F80};
      if (k < int'(pk.lanes)) f[16*k +: 16] = v;
    end
    p = pk.is_int ? int_word : f;
  end
endmodule
