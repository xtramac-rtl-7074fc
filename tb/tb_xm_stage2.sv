// tb_xm_stage2: checks the per-lane post-compute of Stage 2. Stage 1 and the
// multiplier produce the packed product; for every lane the extracted, normalised
// mantissa and exponent must equal the exact reference product (mantissa shifted so
// that its top bit is bit 15, exponent of that bit), and integer lanes must give the
// signed product.
module tb_xm_stage2;
  import xm_pkg::*;
  import xm_ref_pkg::*;

  dtype_e      dtype;
  logic [31:0] a;
  logic [15:0] b;
  logic [26:0] dsp_a;
  logic [17:0] dsp_b;
  logic [44:0] prod;
  lane_meta_s  meta [MAX_LANES];
  lane_prod_s  lp   [MAX_LANES];
  int checks = 0, failures = 0;

  xm_stage1  u_s1 (.dtype, .a, .b, .dsp_a, .dsp_b, .meta);
  xm_dsp_mul u_mul (.a (dsp_a), .b (dsp_b), .p (prod));
  xm_stage2  dut (.dtype, .prod, .meta, .lp);

  task automatic check(int dt, bit [31:0] av, bit [15:0] bv);
    dtype = dtype_e'(dt); a = av; b = bv;
    #1;
    for (int k = 0; k < lanes_of(dt); k++) begin
      automatic num_t pr = lane_prod(dt, av, bv, k);
      automatic bit bad = 0;
      if (pr.nan || pr.inf) continue;
      checks++;
      if (pr.zero) bad = !lp[k].zero;
      else begin
        automatic int msb = 0;
        for (int i = 0; i < 16; i++) if (pr.m[i]) msb = i;
        bad = lp[k].zero || lp[k].sign !== pr.sign
           || lp[k].man !== 16'(pr.m << (15 - msb))
           || int'($signed(lp[k].exp)) != pr.e + msb;
        if (dt == 4 && int'($signed(lp[k].ival)) != (pr.sign ? -int'(pr.m) : int'(pr.m))) bad = 1;
      end
      if (bad) begin
        failures++;
        if (failures < 20) $display("FAIL dt=%0d lane %0d lp=%p", dt, k, lp[k]);
      end
    end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    check(4, 32'h0000_8080, 16'h0080);          // -128 x -128 on both lanes
    check(0, {16'h3FFF, 16'h3FFF}, 16'h3FFF);   // largest mantissas
    for (int i = 0; i < 20000; i++) begin
      automatic int dt = $urandom_range(0, 4);
      automatic bit [31:0] av = $urandom;
      automatic bit [15:0] bv = $urandom;
      if (dt == 0) begin av[15:0] = rand_bf16(8); av[31:16] = rand_bf16(8); end
      if (dt <= 2) bv = rand_bf16(8);
      check(dt, av, bv);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
