// xm_delay: matched delay slice, a chain of DEPTH registers of WIDTH bits.
//
// The MAC keeps control and data aligned by passing every signal that skips a stage
// (datatype select, accumulator C, special-value flags) through register slices of the
// same depth as the datapath it runs beside. The GEMV engine uses the same slice to
// skew operands along its cascaded MAC chain. DEPTH = 0 is a plain wire. The slices
// hold data only and have no reset; a valid bit that needs one is reset by its user.
// Timing: q(t) = d(t - DEPTH).
module xm_delay #(
  parameter int unsigned WIDTH = 1,
  parameter int unsigned DEPTH = 1
) (
  input  logic             clk,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);
  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [WIDTH-1:0] r [DEPTH];
    always_ff @(posedge clk) begin
      r[0] <= d;
      for (int i = 1; i < DEPTH; i++) r[i] <= r[i-1];
    end
    assign q = r[DEPTH-1];
  end
endmodule
