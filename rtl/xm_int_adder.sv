// xm_int_adder: one lane of the integer accumulation path (Stage 3).
//
// Adds a signed 17-bit lane product to a two's-complement INT32 accumulator on the
// carry chain. On overflow the sum saturates to the largest or smallest INT32 value,
// as the paper's integer evaluation setting prescribes ("apply saturation on
// overflow"). Purely combinational.
module xm_int_adder (
  input  logic signed [16:0] prod,
  input  logic signed [31:0] c,
  output logic signed [31:0] sum
);
  logic signed [32:0] wide;
  always_comb begin
    wide = 33'(prod) + 33'(c);
    if (wide > 33'sd2147483647)       sum = 32'sh7FFF_FFFF;
    else if (wide < -33'sd2147483648) sum = 32'sh8000_0000;
    else                              sum = wide[31:0];
  end
endmodule
