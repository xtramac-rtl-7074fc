// tb_xm_stage4: checks special-value selection and output packing. Random adder words
// and random special-value status are applied for every datatype; the expected output
// follows the rules: NaN (product NaN, C NaN, or infinities of opposite sign) -> 7FC0,
// else an infinite product, else an infinite C, else the adder value; unused lanes 0;
// INT8xINT8 passes the integer word.
module tb_xm_stage4;
  import xm_pkg::*;
  import xm_ref_pkg::*;

  dtype_e      dtype;
  logic [63:0] int_word, fp_word, p;
  lane_sv_s    sv [MAX_LANES];
  int checks = 0, failures = 0;
  int n_nan = 0, n_inf = 0;

  xm_stage4 dut (.dtype, .int_word, .fp_word, .sv, .p);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 20000; i++) begin
      automatic int dt = $urandom_range(0, 4);
      automatic bit [63:0] e = 0;
      dtype = dtype_e'(dt);
      int_word = {$urandom, $urandom};
      fp_word  = {$urandom, $urandom};
      for (int k = 0; k < 4; k++) begin
        sv[k] = 6'($urandom);
        if ($urandom_range(0, 1)) begin sv[k].p_nan = 0; sv[k].c_nan = 0; end
        if ($urandom_range(0, 1)) begin sv[k].p_inf = 0; sv[k].c_inf = 0; end
      end
      #1;
      if (dt == 4) e = int_word;
      else for (int k = 0; k < lanes_of(dt); k++) begin
        automatic bit [15:0] v = fp_word[16*k +: 16];
        if (sv[k].p_nan || sv[k].c_nan || (sv[k].p_inf && sv[k].c_inf && sv[k].p_sign != sv[k].c_sign)) begin
          v = 16'h7FC0; n_nan++;
        end else if (sv[k].p_inf) begin v = {sv[k].p_sign, 15'h7F80}; n_inf++; end
        else if (sv[k].c_inf) begin v = {sv[k].c_sign, 15'h7F80}; n_inf++; end
        e[16*k +: 16] = v;
      end
      checks++;
      if (p !== e) begin
        failures++;
        if (failures < 20) $display("FAIL dt=%0d p=%h exp=%h", dt, p, e);
      end
    end
    $display("NaN lanes %0d, infinity lanes %0d", n_nan, n_inf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
