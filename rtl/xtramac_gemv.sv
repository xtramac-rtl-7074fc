// xtramac_gemv: tile-parallel mixed-precision GEMV engine built from XtraMACs.
//
// The weight matrix is split into M_PE tiles, each streamed from its own memory
// channel into one gemv_pe (a cascaded chain of N_MAC XtraMACs). The activation vector
// is written once through a shared port into every PE's on-chip buffer. Each PE
// returns finished output row pairs (two BF16 values) on its own result port.
// Defaults follow the implemented configuration: 30 active channels x 64 MACs per
// 512-bit channel word = 1920 XtraMACs, INT4 or FP4 weights x BF16 activations.
// The HBM channels and their controllers are outside this module: each channel's
// weight stream (word, per-tile datatype, row group, column block, first/last) enters
// on the w_* port arrays, and results leave on the y_* arrays. Timing per PE: see
// gemv_pe (result 4*N_MAC + 2 cycles after the last word of a row group).
// Lint notes mixed synchronous/asynchronous use of rst_n: that comes from the
// assertions inside gemv_pe, not from the circuit (see there).
module xtramac_gemv
  import xm_pkg::*;
#(
  parameter int unsigned M_PE         = 30,
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
  input  logic              w_valid  [M_PE],
  input  logic [W_BITS-1:0] w_data   [M_PE],
  input  dtype_e            w_dtype  [M_PE],
  input  logic [RGW-1:0]    w_rowgrp [M_PE],
  input  logic [CBW-1:0]    w_colblk [M_PE],
  input  logic              w_first  [M_PE],
  input  logic              w_last   [M_PE],
  input  logic              act_we,
  input  logic [AW-1:0]     act_addr,
  input  logic [15:0]       act_data,
  output logic              y_valid  [M_PE],
  output logic [RGW-1:0]    y_rowgrp [M_PE],
  output logic [31:0]       y_data   [M_PE]
);
  for (genvar m = 0; m < M_PE; m++) begin : g_pe
    gemv_pe #(.N_MAC(N_MAC), .K_MAX(K_MAX), .ROWGRP_DEPTH(ROWGRP_DEPTH)) u_pe (
      .clk      (clk),
      .rst_n    (rst_n),
      .w_valid  (w_valid[m]),
      .w_data   (w_data[m]),
      .w_dtype  (w_dtype[m]),
      .w_rowgrp (w_rowgrp[m]),
      .w_colblk (w_colblk[m]),
      .w_first  (w_first[m]),
      .w_last   (w_last[m]),
      .act_we   (act_we),
      .act_addr (act_addr),
      .act_data (act_data),
      .y_valid  (y_valid[m]),
      .y_rowgrp (y_rowgrp[m]),
      .y_data   (y_data[m])
    );
  end
endmodule
