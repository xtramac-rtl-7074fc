// xm_dsp_mul: the datatype-invariant multiplier, the one hard DSP slice of the MAC.
//
// Computes the plain unsigned product p = a * b of the packed DSP-port operands, a
// 27-bit A port and an 18-bit B port as on a DSP48E2. It knows nothing of datatypes:
// all lane packing is done before it (Stage 1) and all lane extraction after it
// (Stage 2). Following the paper, the slice's internal pipeline registers are not used,
// so it is purely combinational between the Stage 1 and Stage 2 registers. Operands
// are unsigned because lanes carry magnitudes; signs are handled outside.
module xm_dsp_mul #(
  parameter int unsigned LA = 27,
  parameter int unsigned LB = 18
) (
  input  logic [LA-1:0]    a,
  input  logic [LB-1:0]    b,
  output logic [LA+LB-1:0] p
);
  always_comb p = (LA+LB)'(a) * (LA+LB)'(b);
endmodule
