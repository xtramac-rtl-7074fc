// xm_stage1: Stage 1 of the MAC, operand interpretation and bit mapping.
//
// One xm_map submodule per enabled datatype decodes A and B in parallel; the datatype
// select then picks one pair of packed DSP-port operands and the matching per-lane
// sign/exponent/special-value metadata. All submodules are built statically, so the
// datatype can change every cycle without reconfiguration. A datatype that is not
// enabled in DT_EN yields all-zero outputs (this design's choice; the paper fixes the
// set of datatypes at synthesis time but does not say what an unsupported code does).
// Purely combinational; the MAC registers the outputs at the end of the stage.
module xm_stage1
  import xm_pkg::*;
#(
  parameter logic [NUM_DT-1:0] DT_EN = '1
) (
  input  dtype_e             dtype,
  input  logic [A_W-1:0]     a,
  input  logic [B_W-1:0]     b,
  output logic [DSP_A_W-1:0] dsp_a,
  output logic [DSP_B_W-1:0] dsp_b,
  output lane_meta_s         meta [MAX_LANES]
);

  logic [DSP_A_W-1:0] m_a    [NUM_DT];
  logic [DSP_B_W-1:0] m_b    [NUM_DT];
  lane_meta_s         m_meta [NUM_DT][MAX_LANES];

  for (genvar d = 0; d < NUM_DT; d++) begin : g_map
    if (DT_EN[d]) begin : g_on
      xm_map #(.DT(dtype_e'(d))) u_map (
        .a     (a),
        .b     (b),
        .dsp_a (m_a[d]),
        .dsp_b (m_b[d]),
        .meta  (m_meta[d])
      );
    end else begin : g_off
      assign m_a[d] = '0;
      assign m_b[d] = '0;
      for (genvar k = 0; k < MAX_LANES; k++) begin : g_lane
        assign m_meta[d][k] = '0;
      end
    end
  end

  always_comb begin
    dsp_a = '0;
    dsp_b = '0;
    for (int k = 0; k < MAX_LANES; k++) meta[k] = '0;
    for (int d = 0; d < NUM_DT; d++) begin
      if (DT_EN[d] && int'(dtype) == d) begin
        dsp_a = m_a[d];
        dsp_b = m_b[d];
        for (int k = 0; k < MAX_LANES; k++) meta[k] = m_meta[d][k];
      end
    end
  end

endmodule
