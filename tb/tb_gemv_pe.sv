// tb_gemv_pe: checks one GEMV processing element (a chain of 4 XtraMACs) end to end.
//
// Each PE gets its own random weight tile (6 row groups = 12 output rows, K =
// 32 columns) and a datatype per weight word chosen at random between INT4 x BF16
// and FP4 x BF16, so the datatype switches inside every dot product. The shared
// activation vector is written first. Words are issued column block by column block;
// when fewer row groups than the chain latency are in flight, idle cycles keep the
// re-issue distance of 4*N_MAC + 2 cycles. Every result row is compared bit-exactly
// with a reference that applies the same sequence of single-rounding MACs, and its
// arrival time is checked (4*N_MAC + 2 cycles after the row group's last word).
// Mechanisms counted: zero start of a chain (first column block), partial-sum
// feedback through the on-chip memory, datatype switches between consecutive words,
// idle gaps; a mechanism that never occurs counts as a failure.
module tb_gemv_pe;
  import xm_pkg::*;
  import xm_ref_pkg::*;

  localparam int unsigned M   = 1;
  localparam int unsigned N   = 4;
  localparam int unsigned K   = 32;
  localparam int unsigned RGD = 32;
  localparam int unsigned G   = 6;
  localparam int unsigned NCB = K / N;
  localparam int unsigned RGW = $clog2(RGD);
  localparam int unsigned CBW = (NCB > 1) ? $clog2(NCB) : 1;
  localparam int unsigned LAT = 4 * N + 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              w_valid  [M];
  logic [8*N-1:0]    w_data   [M];
  dtype_e            w_dtype  [M];
  logic [RGW-1:0]    w_rowgrp [M];
  logic [CBW-1:0]    w_colblk [M];
  logic              w_first  [M];
  logic              w_last   [M];
  logic              act_we;
  logic [$clog2(K)-1:0] act_addr;
  logic [15:0]       act_data;
  logic              y_valid  [M];
  logic [RGW-1:0]    y_rowgrp [M];
  logic [31:0]       y_data   [M];

  gemv_pe #(.N_MAC(N), .K_MAX(K), .ROWGRP_DEPTH(RGD)) dut (
    .clk, .rst_n, .w_valid (w_valid[0]), .w_data (w_data[0]), .w_dtype (w_dtype[0]),
    .w_rowgrp (w_rowgrp[0]), .w_colblk (w_colblk[0]), .w_first (w_first[0]), .w_last (w_last[0]),
    .act_we, .act_addr, .act_data, .y_valid (y_valid[0]), .y_rowgrp (y_rowgrp[0]), .y_data (y_data[0])
  );

  // Test data.
  logic [8*N-1:0] wt   [M][G][NCB];
  int             wdt  [M][G][NCB];
  logic [15:0]    act  [K];
  logic [31:0]    yref [M][G];
  longint         t_last [M][G];
  bit             seen [M][G];

  int checks = 0, failures = 0;
  int n_first = 0, n_feedback = 0, n_switch = 0, n_idle = 0, n_rows = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  // Result monitor.
  always @(posedge clk) begin
    #1;
    for (int m = 0; m < M; m++) if (rst_n && y_valid[m]) begin
      automatic int g = int'(y_rowgrp[m]);
      checks++;
      n_rows++;
      if (g >= G || seen[m][g] || y_data[m] !== yref[m][g] || cyc - t_last[m][g] != LAT) begin
        failures++;
        if (failures < 20) $display("FAIL PE %0d row group %0d: %h exp %h, after %0d cycles",
                                    m, g, y_data[m], yref[m][g], cyc - t_last[m][g]);
      end
      if (g < G) seen[m][g] = 1;
    end
  end

  initial begin
    #(1000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // ---- data and reference
    for (int i = 0; i < K; i++) act[i] = {1'($urandom), 8'(124 + $urandom_range(0, 6)), 7'($urandom)};
    for (int m = 0; m < M; m++)
      for (int g = 0; g < G; g++) begin
        for (int cb = 0; cb < NCB; cb++) begin
          for (int j = 0; j < N; j++) wt[m][g][cb][8*j +: 8] = 8'($urandom);
          wdt[m][g][cb] = $urandom_range(1, 2);
        end
        for (int l = 0; l < 2; l++) begin
          automatic bit [15:0] acc = 16'h0000;
          for (int cb = 0; cb < NCB; cb++)
            for (int j = 0; j < N; j++)
              acc = fp_lane(lane_prod(wdt[m][g][cb], {24'd0, wt[m][g][cb][8*j +: 8]},
                                      act[cb*N + j], l), acc);
          yref[m][g][16*l +: 16] = acc;
        end
        seen[m][g] = 0;
      end

    // ---- reset and activation load
    act_we = 0; act_addr = 0; act_data = 0;
    for (int m = 0; m < M; m++) begin
      w_valid[m] = 0; w_data[m] = 0; w_dtype[m] = DT_INT4_BF16; w_rowgrp[m] = 0;
      w_colblk[m] = 0; w_first[m] = 0; w_last[m] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < K; i++) begin
      act_we <= 1; act_addr <= $clog2(K)'(i); act_data <= act[i];
      @(posedge clk);
    end
    act_we <= 0;

    // ---- weight streams, all PEs in lock step
    begin
      int prev_dt [M];
      for (int m = 0; m < M; m++) prev_dt[m] = -1;
      for (int cb = 0; cb < NCB; cb++) begin
        automatic int issued = 0;
        for (int g = 0; g < G; g++) begin
          for (int m = 0; m < M; m++) begin
            w_valid[m]  <= 1;
            w_data[m]   <= wt[m][g][cb];
            w_dtype[m]  <= dtype_e'(wdt[m][g][cb]);
            w_rowgrp[m] <= RGW'(g);
            w_colblk[m] <= CBW'(cb);
            w_first[m]  <= (cb == 0);
            w_last[m]   <= (cb == NCB - 1);
            if (prev_dt[m] >= 0 && prev_dt[m] != wdt[m][g][cb]) n_switch++;
            prev_dt[m] = wdt[m][g][cb];
            if (cb == 0) n_first++; else n_feedback++;
          end
          @(posedge clk);
          #1;
          for (int m = 0; m < M; m++) t_last[m][g] = cyc;
          issued++;
        end
        for (int m = 0; m < M; m++) w_valid[m] <= 0;
        for (int t = issued; t < LAT; t++) begin
          n_idle++;
          @(posedge clk);
        end
      end
      for (int m = 0; m < M; m++) w_valid[m] <= 0;
    end
    repeat (LAT + 4) @(posedge clk);

    for (int m = 0; m < M; m++)
      for (int g = 0; g < G; g++) begin
        checks++;
        if (!seen[m][g]) begin
          failures++;
          $display("FAIL PE %0d row group %0d produced no result", m, g);
        end
      end
    $display("rows checked %0d, zero starts %0d, partial-sum feedbacks %0d, datatype switches %0d, idle cycles %0d",
             n_rows, n_first, n_feedback, n_switch, n_idle);
    checks += 4;
    if (n_first == 0)    failures++;
    if (n_feedback == 0) failures++;
    if (n_switch == 0)   failures++;
    if (n_idle == 0)     failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
