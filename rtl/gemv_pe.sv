// gemv_pe: one GEMV processing element, a cascaded chain of N_MAC XtraMACs.
//
// Each cycle the PE may take one 512-bit weight word from its memory channel. The word
// holds, for two output rows (a "row group") and one block of N_MAC consecutive
// columns, 2 x N_MAC 4-bit weights: MAC k gets bits [8k +: 8], i.e. the weights of
// both rows at column cb*N_MAC + k, as its two A lanes; its B operand is activation
// cb*N_MAC + k from the on-chip activation buffer (xm_act_buf). The per-tile datatype
// (INT4 x BF16 or FP4 x BF16, the two GEMV patterns of the case study) comes with the
// word and travels with it to every MAC, so consecutive words may use different types.
//
// Chain timing: MAC k sees its operands 4k + 1 cycles after the word is registered,
// exactly when MAC k-1's result (latency 4) arrives on its C input, so partial sums
// flow down the chain with no extra adders. MAC 0's C is zero for the first column
// block of a row group (w_first) and otherwise that row group's partial sum, read from
// the on-chip partial-sum memory. The chain's final result is written back there and,
// for the last column block (w_last), also emitted on y_*. Weights and control are
// skewed along the chain by per-MAC delay slices.
//
// Rule for the weight stream: a row group may not be issued again before its previous
// partial sum has been written back, i.e. within 4*N_MAC + 2 cycles; an assertion
// checks it. Latency from word to y_valid: 4*N_MAC + 2 cycles.
// Follows the paper: cascaded chain, zero into the first MAC, per-tile datatype,
// weight word split into per-MAC segments, activations and sums in on-chip memory.
// This design's choices: the word layout, the feedback of partial sums through MAC 0
// and the partial-sum memory size (ROWGRP_DEPTH).
// rst_n is an asynchronous reset of the valid bits; the checking assertions also use
// it synchronously (disable iff), which a linter reports as mixed use. The circuit
// itself only uses it asynchronously.
module gemv_pe
  import xm_pkg::*;
#(
  parameter int unsigned N_MAC        = 64,
  parameter int unsigned K_MAX        = 4096,
  parameter int unsigned ROWGRP_DEPTH = 512,
  localparam int unsigned W_BITS = 8 * N_MAC,
  localparam int unsigned AW     = $clog2(K_MAX),
  localparam int unsigned NCB    = K_MAX / N_MAC,
  localparam int unsigned CBW    = (NCB > 1) ? $clog2(NCB) : 1,
  localparam int unsigned RGW    = $clog2(ROWGRP_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // weight stream from the memory channel
  input  logic              w_valid,
  input  logic [W_BITS-1:0] w_data,
  input  dtype_e            w_dtype,
  input  logic [RGW-1:0]    w_rowgrp,
  input  logic [CBW-1:0]    w_colblk,
  input  logic              w_first,
  input  logic              w_last,
  // activation write port
  input  logic              act_we,
  input  logic [AW-1:0]     act_addr,
  input  logic [15:0]       act_data,
  // results: two BF16 rows of one row group
  output logic              y_valid,
  output logic [RGW-1:0]    y_rowgrp,
  output logic [31:0]       y_data
);
  localparam logic [NUM_DT-1:0] GEMV_DT =
      (NUM_DT'(1) << DT_INT4_BF16) | (NUM_DT'(1) << DT_FP4_BF16);
  localparam int unsigned VLEN = 4 * N_MAC + 1;

  // ------------------------------------------------------------ input register
  typedef struct packed {
    logic           v;
    dtype_e         dt;
    logic [RGW-1:0] rg;
    logic [CBW-1:0] cb;
    logic           first;
    logic           last;
  } ctrl_s;

  ctrl_s             c0;
  logic [W_BITS-1:0] w0;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) c0 <= '0;
    else        c0 <= '{w_valid, w_dtype, w_rowgrp, w_colblk, w_first, w_last};
  end
  always_ff @(posedge clk) w0 <= w_data;

  // ------------------------------------------------------------ partial sums
  logic [31:0] psum_mem [ROWGRP_DEPTH];
  logic [31:0] psum_rd;
  logic        first_d;
  ctrl_s       c_end;
  logic [63:0] chain_p [N_MAC];
  logic        chain_v [N_MAC];

  always_ff @(posedge clk) begin
    psum_rd <= psum_mem[c0.rg];
    first_d <= c0.first;
    if (c_end.v && chain_v[N_MAC-1]) psum_mem[c_end.rg] <= chain_p[N_MAC-1][31:0];
  end

  // ------------------------------------------------------------ activations
  logic [CBW-1:0] act_ra [N_MAC];
  logic [15:0]    act_rd [N_MAC];

  xm_act_buf #(.N_BANKS(N_MAC), .K_MAX(K_MAX)) u_act (
    .clk (clk), .we (act_we), .waddr (act_addr), .wdata (act_data),
    .raddr (act_ra), .rdata (act_rd)
  );

  // ------------------------------------------------------------ MAC chain
  ctrl_s ck [N_MAC];   // control as seen by the activation read of MAC k
  ctrl_s cm [N_MAC];   // control as seen by MAC k's operands (one cycle later)
  ctrl_s ck_raw [N_MAC];
  ctrl_s cm_raw [N_MAC];
  ctrl_s c_end_raw;

  // The valid bits of the skewed control travel in one resettable shift register;
  // the other control fields use plain delay slices.
  logic [VLEN-1:0] vsr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vsr <= '0;
    else        vsr <= {vsr[VLEN-2:0], c0.v};
  end

  for (genvar k = 0; k < N_MAC; k++) begin : g_mac
    logic [7:0] seg;

    // Control reaches MAC k's activation read 4k cycles after the input register.
    if (k == 0) begin : g_c0
      assign ck_raw[0] = c0;
    end else begin : g_ck
      xm_delay #(.WIDTH($bits(ctrl_s)), .DEPTH(4)) u_dc (.clk (clk), .d (ck_raw[k-1]), .q (ck_raw[k]));
    end
    xm_delay #(.WIDTH($bits(ctrl_s)), .DEPTH(1)) u_dm (.clk (clk), .d (ck_raw[k]), .q (cm_raw[k]));

    if (k == 0) begin : g_v0
      always_comb begin
        ck[k]   = ck_raw[k];
        ck[k].v = c0.v;
      end
    end else begin : g_vk
      always_comb begin
        ck[k]   = ck_raw[k];
        ck[k].v = vsr[4*k-1];
      end
    end
    always_comb begin
      cm[k]   = cm_raw[k];
      cm[k].v = vsr[4*k];
    end
    assign act_ra[k] = ck[k].cb;
    xm_delay #(.WIDTH(8), .DEPTH(4 * k + 1)) u_dw (.clk (clk), .d (w0[8*k +: 8]), .q (seg));

    logic [63:0] c_in;
    if (k == 0) begin : g_head
      assign c_in = first_d ? 64'd0 : {32'd0, psum_rd};
    end else begin : g_link
      assign c_in = chain_p[k-1];
    end

    xtramac #(.DT_EN(GEMV_DT)) u_mac (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (cm[k].v),
      .dtype     (cm[k].dt),
      .a         ({24'd0, seg}),
      .b         (act_rd[k]),
      .c         (c_in),
      .out_valid (chain_v[k]),
      .p         (chain_p[k])
    );
  end

  // Control of the chain output: MAC N-1's operands plus its 4-cycle latency.
  xm_delay #(.WIDTH($bits(ctrl_s)), .DEPTH(4)) u_dend (.clk (clk), .d (cm_raw[N_MAC-1]), .q (c_end_raw));
  always_comb begin
    c_end   = c_end_raw;
    c_end.v = vsr[VLEN-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_valid  <= 1'b0;
      y_rowgrp <= '0;
      y_data   <= '0;
    end else begin
      y_valid  <= c_end.v && c_end.last && chain_v[N_MAC-1];
      y_rowgrp <= c_end.rg;
      y_data   <= chain_p[N_MAC-1][31:0];
    end
  end

  // ------------------------------------------------------------ stream rule
  // A row group is busy from its issue until its partial sum is written back.
  logic [ROWGRP_DEPTH-1:0] busy;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) busy <= '0;
    else begin
      if (c_end.v && chain_v[N_MAC-1]) busy[c_end.rg] <= 1'b0;
      if (c0.v) busy[c0.rg] <= 1'b1;
    end
  end

  a_rowgrp_reissue: assert property (@(posedge clk) disable iff (!rst_n)
      c0.v |-> !busy[c0.rg])
    else $error("row group %0d issued again before its partial sum was written back", c0.rg);

  a_dtype_supported: assert property (@(posedge clk) disable iff (!rst_n)
      c0.v |-> (c0.dt == DT_INT4_BF16 || c0.dt == DT_FP4_BF16))
    else $error("datatype %0d is not built into the GEMV chain", c0.dt);

endmodule
