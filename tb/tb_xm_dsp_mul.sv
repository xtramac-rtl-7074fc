// tb_xm_dsp_mul: checks the 27x18 unsigned multiplier against 64-bit arithmetic,
// including the all-ones corner and packed two-lane operands.
module tb_xm_dsp_mul;
  logic [26:0] a;
  logic [17:0] b;
  logic [44:0] p;
  int checks = 0, failures = 0;

  xm_dsp_mul dut (.a, .b, .p);

  task automatic check(bit [26:0] av, bit [17:0] bv);
    a = av; b = bv;
    #1;
    checks++;
    if (p !== 45'(longint'(av) * longint'(bv))) begin
      failures++;
      if (failures < 20) $display("FAIL %h * %h = %h", av, bv, p);
    end
  endtask

  initial begin
    check('1, '1);
    check(0, '1);
    check(27'(8'hFF) | (27'(8'hFF) << 17), 18'hFF);
    for (int i = 0; i < 20000; i++) check(27'($urandom), 18'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
