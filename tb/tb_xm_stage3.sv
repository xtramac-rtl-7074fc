// tb_xm_stage3: checks the accumulation stage. Stages 1 and 2 (with the multiplier)
// produce the lane products; for finite lanes the FP word must hold the reference
// BF16 sums, for INT8 the integer word the saturated INT32 sums, and the collected
// special-value status must match the product and accumulator flags.
module tb_xm_stage3;
  import xm_pkg::*;
  import xm_ref_pkg::*;

  dtype_e      dtype;
  logic [31:0] a;
  logic [15:0] b;
  logic [63:0] c;
  logic [26:0] dsp_a;
  logic [17:0] dsp_b;
  logic [44:0] prod;
  lane_meta_s  meta [MAX_LANES];
  lane_prod_s  lp   [MAX_LANES];
  logic [63:0] int_word, fp_word;
  lane_sv_s    sv   [MAX_LANES];
  int checks = 0, failures = 0;

  xm_stage1  u_s1 (.dtype, .a, .b, .dsp_a, .dsp_b, .meta);
  xm_dsp_mul u_mul (.a (dsp_a), .b (dsp_b), .p (prod));
  xm_stage2  u_s2 (.dtype, .prod, .meta, .lp);
  xm_stage3  dut (.lp, .c, .int_word, .fp_word, .sv);

  task automatic check(int dt, bit [31:0] av, bit [15:0] bv, bit [63:0] cv);
    dtype = dtype_e'(dt); a = av; b = bv; c = cv;
    #1;
    if (dt == 4) begin
      for (int k = 0; k < 2; k++) begin
        checks++;
        if (int_word[32*k +: 32] !== int_lane(av[8*k +: 8], bv[7:0], cv[32*k +: 32])) begin
          failures++;
          if (failures < 20) $display("FAIL int lane %0d %h", k, int_word);
        end
      end
    end else begin
      for (int k = 0; k < lanes_of(dt); k++) begin
        automatic num_t pr = lane_prod(dt, av, bv, k);
        automatic num_t cn = dec(0, cv[16*k +: 16]);
        checks++;
        if (sv[k].p_nan !== pr.nan || sv[k].p_inf !== pr.inf || sv[k].c_nan !== cn.nan
            || sv[k].c_inf !== cn.inf || sv[k].c_sign !== cv[16*k+15]) begin
          failures++;
          if (failures < 20) $display("FAIL sv lane %0d %p", k, sv[k]);
        end
        if (!pr.nan && !pr.inf && !cn.nan && !cn.inf) begin
          checks++;
          if (fp_word[16*k +: 16] !== add_round(pr, cn)) begin
            failures++;
            if (failures < 20) $display("FAIL dt=%0d fp lane %0d %h exp %h", dt, k, fp_word[16*k +: 16], add_round(pr, cn));
          end
        end
      end
    end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 20000; i++) begin
      automatic int dt = $urandom_range(0, 4);
      automatic bit [31:0] av = $urandom;
      automatic bit [15:0] bv = $urandom;
      automatic bit [63:0] cv = {$urandom, $urandom};
      if (dt == 0) begin av[15:0] = rand_bf16(8); av[31:16] = rand_bf16(8); end
      if (dt <= 2) bv = rand_bf16(8);
      if (dt != 4) for (int k = 0; k < 4; k++) cv[16*k +: 16] = rand_bf16(10);
      check(dt, av, bv, cv);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
