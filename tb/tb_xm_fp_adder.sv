// tb_xm_fp_adder: checks the BF16 accumulation lane against the exact reference.
// Random normalised products (16-bit mantissa, exponents around and far from the
// accumulator's) are added to random BF16 accumulators; directed cases cover exact
// cancellation, rounding ties, rounding carry-out, overflow to infinity, flush to
// zero, zero operands and subnormal accumulators.
module tb_xm_fp_adder;
  import xm_pkg::*;
  import xm_ref_pkg::*;

  lane_prod_s  p;
  logic [15:0] c, sum;
  int checks = 0, failures = 0;

  xm_fp_adder dut (.p, .c, .sum);

  task automatic check(bit sgn, bit zero, int e, bit [15:0] man, bit [15:0] cv);
    num_t pn;
    bit [15:0] exp;
    p = '0; p.sign = sgn; p.zero = zero; p.exp = EXP_W'(e); p.man = man;
    c = cv;
    #1;
    pn = '{default: 0};
    pn.sign = sgn; pn.zero = zero; pn.m = man; pn.e = e - 15;
    exp = add_round(pn, dec(0, cv));
    checks++;
    if (sum !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL p=(%0b,%0d,%h) c=%h sum=%h exp=%h", sgn, e, man, cv, sum, exp);
    end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    check(0, 0, 0, 16'h8000, 16'hBF80);            // 1 - 1 = +0
    check(1, 0, 0, 16'h8000, 16'hBF80);            // -1 - 1 = -2
    check(1, 1, 0, 16'h8000, 16'h8000);            // -0 + -0 = -0
    check(0, 0, 0, 16'h8080, 16'h0000);            // tie, even: 1.00000001 -> 1.0
    check(0, 0, 0, 16'h8180, 16'h0000);            // tie, odd -> round up
    check(0, 0, 0, 16'hFF80, 16'h0000);            // rounding carries into exponent
    check(0, 0, 127, 16'hFFFF, 16'h7F7F);          // overflow -> +inf
    check(1, 0, -127, 16'h8000, 16'h0000);         // below normal range -> -0
    check(0, 0, -126, 16'h8000, 16'h0040);         // subnormal accumulator read as 0
    check(0, 0, 5, 16'hABCD, 16'h0000);            // product alone
    check(0, 1, 5, 16'h0000, 16'h4123);            // accumulator alone
    check(0, 0, 0, 16'h8000, 16'hBF7F);            // near cancellation
    check(1, 0, 30, 16'h8001, 16'h4E80);           // far apart, sticky decides
    for (int i = 0; i < 40000; i++) begin
      automatic int ce = $urandom_range(1, 254);
      automatic int e  = ce - 127 + int'($urandom_range(0, 60)) - 30;
      automatic bit [15:0] man = 16'h8000 | 16'($urandom);
      automatic bit [15:0] cv = {1'($urandom), 8'(ce), 7'($urandom)};
      if (i % 7 == 0) man[7:0] = 8'h80;             // many ties
      if (i % 11 == 0) e = ce - 127 + int'($urandom_range(0, 4)) - 2;   // cancellation
      if (i % 13 == 0) e = int'($urandom_range(0, 500)) - 250;          // wide range
      check(1'($urandom), i % 97 == 0, e, man, cv);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
