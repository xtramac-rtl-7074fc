// tb_xtramac: self-checking test of the four-stage MAC.
//
// Every cycle a random datatype and random packed operands are applied (so the
// datatype switches almost every cycle); the expected result from xm_ref_pkg is
// queued and compared with p exactly four cycles later, which checks the latency and
// the initiation interval of one. Directed cases cover NaN, infinity, inf x 0,
// inf - inf, overflow to infinity, flush to zero, cancellation to +0 and INT32
// saturation. A second instance with one extra register per stage checks that the
// latency grows to 8 while results stay the same.
module tb_xtramac;
  import xm_pkg::*;
  import xm_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid;
  dtype_e      dtype;
  logic [31:0] a;
  logic [15:0] b;
  logic [63:0] c;
  logic        ov, ov8;
  logic [63:0] p, p8;

  xtramac dut (.clk, .rst_n, .in_valid, .dtype, .a, .b, .c, .out_valid(ov), .p);
  xtramac #(.EXTRA_S1(1), .EXTRA_S2(1), .EXTRA_S3(1), .EXTRA_S4(1)) dut8
    (.clk, .rst_n, .in_valid, .dtype, .a, .b, .c, .out_valid(ov8), .p(p8));

  int checks = 0, failures = 0;
  int per_dt [5];
  int switches = 0;

  typedef struct { bit v; bit [63:0] exp; int dt; } exp_t;
  exp_t pipe [9];   // pipe[n] = what was applied n cycles ago

  function automatic bit [63:0] rand_c(int dt);
    bit [63:0] r;
    if (dt == 4) begin
      r = {$urandom, $urandom};
      if ($urandom_range(0, 9) == 0) r[31:0] = 32'h7FFF_FF00 + 32'($urandom_range(0, 255));
      if ($urandom_range(0, 9) == 0) r[63:32] = 32'h8000_0010 - 32'($urandom_range(0, 255));
    end else begin
      for (int k = 0; k < 4; k++) r[16*k +: 16] = rand_bf16($urandom_range(0, 1) ? 4 : 20);
    end
    return r;
  endfunction

  task automatic apply(int dt, bit [31:0] av, bit [15:0] bv, bit [63:0] cv);
    in_valid <= 1; dtype <= dtype_e'(dt); a <= av; b <= bv; c <= cv;
    @(posedge clk);
  endtask

  // Random operands for datatype dt.
  task automatic apply_rand(int dt);
    bit [31:0] av; bit [15:0] bv;
    av = $urandom; bv = $urandom;
    if (dt == 0) begin av[15:0] = rand_bf16(6); av[31:16] = rand_bf16(6); bv = rand_bf16(6); end
    if (dt == 1 || dt == 2) bv = rand_bf16(6);
    apply(dt, av, bv, rand_c(dt));
  endtask

  // Checker: runs on every rising edge, after the DUT has updated.
  always @(posedge clk) begin
    #1;
    for (int n = 8; n > 0; n--) pipe[n] = pipe[n-1];
    pipe[0].v   = rst_n && in_valid;
    pipe[0].exp = in_valid ? mac(int'(dtype), a, b, c) : 64'd0;
    pipe[0].dt  = int'(dtype);
  end

  always @(negedge clk) if (rst_n) begin
    checks++;
    if (ov !== pipe[4].v) begin
      failures++; $display("FAIL valid latency: ov=%0b expected %0b", ov, pipe[4].v);
    end
    if (pipe[4].v) begin
      checks++;
      per_dt[pipe[4].dt]++;
      if (p !== pipe[4].exp) begin
        failures++;
        if (failures < 20) $display("FAIL dt=%0d p=%h exp=%h", pipe[4].dt, p, pipe[4].exp);
      end
    end
    if (pipe[8].v) begin
      checks++;
      if (!ov8 || p8 !== pipe[8].exp) begin
        failures++;
        if (failures < 20) $display("FAIL 8-cycle instance dt=%0d p=%h exp=%h", pipe[8].dt, p8, pipe[8].exp);
      end
    end
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int prev = -1;
    in_valid = 0; dtype = DT_BF16_BF16; a = 0; b = 0; c = 0;
    for (int n = 0; n < 9; n++) pipe[n] = '{0, 64'd0, 0};
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // Directed special values.
    apply(0, {16'h7FC1, 16'h3F80}, 16'h4000, {16'h0, 16'h0, 16'h3F80, 16'h3F80});   // NaN lane 1
    apply(0, {16'h0000, 16'h7F80}, 16'h3F80, {16'h0, 16'h0, 16'h3F80, 16'h3F80});   // inf, lane 1 plain
    apply(0, {16'h7F80, 16'h0000}, 16'h7F80, {16'h0, 16'h0, 16'h0, 16'h3F80});      // 0 x inf, inf x inf
    apply(0, {16'h3F80, 16'h7F80}, 16'h3F80, {16'h0, 16'h0, 16'hFF80, 16'hFF80});   // inf - inf
    apply(0, {16'h7F00, 16'h7F7F}, 16'h7F7F, {16'h0, 16'h0, 16'h0, 16'h0});         // overflow
    apply(0, {16'h0100, 16'h0080}, 16'h0080, {16'h0, 16'h0, 16'h0, 16'h0});         // underflow -> 0
    apply(0, {16'h3F80, 16'h3F80}, 16'h3F80, {16'h0, 16'h0, 16'hBF80, 16'hBF80});   // 1 - 1 = +0
    apply(1, 32'h0000_0087, 16'hC040, {32'h0, 16'h3F80, 16'h4000});                 // INT4 -8, 7
    apply(2, 32'h0000_00F7, 16'h3F80, {32'h0, 16'h3F80, 16'h4000});                 // FP4
    apply(3, 32'h0000_7F38, 16'hB83C, {16'h3F80, 16'h3F80, 16'h3F80, 16'h3F80});    // FP8 incl NaN
    apply(4, 32'h0000_807F, 16'h0080, {32'h8000_0000, 32'h7FFF_FFF0});             // INT8 saturation
    apply(4, 32'h0000_7F7F, 16'h007F, {32'h7FFF_FFFF, 32'h7FFF_0000});
    // Random traffic with per-cycle datatype switching and occasional idle cycles.
    for (int i = 0; i < 6000; i++) begin
      automatic int dt = $urandom_range(0, 4);
      if ($urandom_range(0, 15) == 0) begin
        in_valid <= 0; @(posedge clk);
      end else begin
        if (dt != prev) switches++;
        prev = dt;
        apply_rand(dt);
      end
    end
    in_valid <= 0;
    repeat (12) @(posedge clk);
    for (int d = 0; d < 5; d++) begin
      $display("datatype %0d: %0d results checked", d, per_dt[d]);
      checks++;
      if (per_dt[d] == 0) failures++;
    end
    $display("datatype switches: %0d", switches);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
