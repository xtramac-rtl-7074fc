// tb_xm_stage1: checks Stage 1 (operand decode, DSP packing, lane metadata) for all
// five datatypes. Expected DSP-port words are rebuilt from the reference decoder and
// the packing strides (BF16 17, INT4xBF16 13, FP4xBF16 11, FP8xFP8 9 with A values at
// 18, INT8 17); expected per-lane sign, scale and NaN/inf/zero flags come from the
// reference product.
module tb_xm_stage1;
  import xm_pkg::*;
  import xm_ref_pkg::*;

  dtype_e      dtype;
  logic [31:0] a;
  logic [15:0] b;
  logic [26:0] dsp_a;
  logic [17:0] dsp_b;
  lane_meta_s  meta [MAX_LANES];
  int checks = 0, failures = 0;

  xm_stage1 dut (.dtype, .a, .b, .dsp_a, .dsp_b, .meta);

  function automatic int fmt_a(int dt);
    return dt == 0 ? 0 : dt == 1 ? 3 : dt == 2 ? 2 : dt == 3 ? 1 : 4;
  endfunction
  function automatic int wa(int dt);
    return dt == 0 ? 16 : (dt == 1 || dt == 2) ? 4 : 8;
  endfunction
  function automatic int stride(int dt);
    return dt == 0 ? 17 : dt == 1 ? 13 : dt == 2 ? 11 : dt == 3 ? 9 : 17;
  endfunction

  task automatic check(int dt, bit [31:0] av, bit [15:0] bv);
    bit [26:0] ea; bit [17:0] eb;
    int pb = (dt == 3) ? 2 : 1;
    dtype = dtype_e'(dt); a = av; b = bv;
    #1;
    ea = 0; eb = 0;
    for (int i = 0; i < 2; i++) begin
      automatic bit [15:0] x = 16'((av >> (i * wa(dt))) & ((32'd1 << wa(dt)) - 1));
      ea |= 27'(dec(fmt_a(dt), x).m) << (i * pb * stride(dt));
    end
    if (dt == 3) for (int j = 0; j < 2; j++) eb |= 18'(dec(1, 16'(bv[8*j +: 8])).m) << (j * 9);
    else if (dt == 4) eb = 18'(dec(4, 16'(bv[7:0])).m);
    else eb = 18'(dec(0, bv).m);
    checks++;
    if (dsp_a !== ea || dsp_b !== eb) begin
      failures++;
      if (failures < 20) $display("FAIL dt=%0d a=%h b=%h dsp_a=%h/%h dsp_b=%h/%h", dt, av, bv, dsp_a, ea, dsp_b, eb);
    end
    for (int k = 0; k < lanes_of(dt); k++) begin
      automatic num_t pr = lane_prod(dt, av, bv, k);
      checks++;
      if (meta[k].flags.nan !== pr.nan || meta[k].flags.inf !== pr.inf || meta[k].flags.zero !== pr.zero
          || (!pr.nan && meta[k].sign !== pr.sign)
          || (!pr.nan && !pr.inf && !pr.zero && int'($signed(meta[k].scale)) != pr.e)) begin
        failures++;
        if (failures < 20) $display("FAIL dt=%0d lane %0d meta=%p", dt, k, meta[k]);
      end
    end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    check(0, {16'h7F80, 16'h0000}, 16'h7F80);   // inf x inf, 0 x inf
    check(0, {16'h7FC1, 16'h0001}, 16'h3F80);   // NaN, subnormal
    check(1, 32'h0000_0080, 16'h7F80);          // INT4 0 x inf, -8 x inf
    check(3, 32'h0000_7F08, 16'h0078);          // FP8 NaN encodings
    check(4, 32'h0000_8001, 16'h0080);          // INT8 -128
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
