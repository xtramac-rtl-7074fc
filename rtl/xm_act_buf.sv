// xm_act_buf: on-chip activation memory of one GEMV processing element.
//
// The activation vector (BF16) is stored once per PE and read by every MAC of the
// cascaded chain. It is split into N_BANKS banks, one per MAC, so that all MACs can
// read in the same cycle: activation index i lives in bank i % N_BANKS at entry
// i / N_BANKS, and MAC k reads column block cb of its bank. Each bank is a simple
// dual-port memory: one write port shared by all banks (the activation stream; only
// the addressed bank is written) and one registered read port per bank, so data
// appear one cycle after the read address. Sizes: K_MAX activations in total
// (default 4096, the reduction length of the evaluated GEMVs). The banking and the
// one-cycle read are this design's choices; the paper says only that activations are
// buffered on chip for reuse.
module xm_act_buf #(
  parameter int unsigned N_BANKS = 64,
  parameter int unsigned K_MAX   = 4096,
  localparam int unsigned DEPTH  = K_MAX / N_BANKS,
  localparam int unsigned AW     = $clog2(K_MAX),
  localparam int unsigned EW     = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [15:0]   wdata,
  input  logic [EW-1:0] raddr [N_BANKS],
  output logic [15:0]   rdata [N_BANKS]
);
  for (genvar k = 0; k < N_BANKS; k++) begin : g_bank
    logic [15:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we && (32'(waddr) % N_BANKS) == k) mem[EW'(32'(waddr) / N_BANKS)] <= wdata;
      rdata[k] <= mem[raddr[k]];
    end
  end
endmodule
