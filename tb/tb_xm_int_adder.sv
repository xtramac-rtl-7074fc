// tb_xm_int_adder: checks the saturating INT32 lane adder, including both saturation
// limits, against 64-bit arithmetic.
module tb_xm_int_adder;
  logic signed [16:0] prod;
  logic signed [31:0] c, sum;
  int checks = 0, failures = 0;
  int sat_hi = 0, sat_lo = 0;

  xm_int_adder dut (.prod, .c, .sum);

  task automatic check(int pv, int cv);
    longint s;
    bit [31:0] exp;
    prod = 17'(pv); c = cv;
    #1;
    s = longint'(pv) + longint'(cv);
    if (s > 64'sd2147483647) begin exp = 32'h7FFF_FFFF; sat_hi++; end
    else if (s < -64'sd2147483648) begin exp = 32'h8000_0000; sat_lo++; end
    else exp = 32'(s);
    checks++;
    if (sum !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %0d + %0d = %0d", pv, cv, sum);
    end
  endtask

  initial begin
    check(16384, 32'h7FFF_F000);
    check(-16384, 32'h8000_0100);
    check(-65536, 0);
    check(65535, -1);
    for (int i = 0; i < 20000; i++) begin
      automatic int pv = int'($urandom_range(0, 131071)) - 65536;
      automatic int cv = $urandom;
      if (i % 5 == 0) cv = 32'h7FFF_0000 + 32'($urandom_range(0, 65535));
      if (i % 5 == 1) cv = 32'h8000_FFFF - 32'($urandom_range(0, 65535));
      check(pv, cv);
    end
    checks++;
    if (sat_hi == 0 || sat_lo == 0) failures++;
    $display("saturations: high %0d, low %0d", sat_hi, sat_lo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
