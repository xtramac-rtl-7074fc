// tb_xm_act_buf: writes a full activation vector, then reads every bank at random
// entries and checks the data one cycle after the address (registered read).
module tb_xm_act_buf;
  localparam int unsigned NB = 8, K = 64, D = K / NB;
  logic clk = 0;
  always #5 clk = ~clk;
  logic        we;
  logic [5:0]  waddr;
  logic [15:0] wdata;
  logic [2:0]  raddr [NB];
  logic [15:0] rdata [NB];
  logic [15:0] model [K];
  int checks = 0, failures = 0;

  xm_act_buf #(.N_BANKS(NB), .K_MAX(K)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; waddr = 0; wdata = 0;
    for (int k = 0; k < NB; k++) raddr[k] = 0;
    @(posedge clk);
    for (int i = 0; i < K; i++) begin
      model[i] = 16'($urandom);
      we <= 1; waddr <= 6'(i); wdata <= model[i];
      @(posedge clk);
    end
    we <= 0;
    for (int t = 0; t < 200; t++) begin
      automatic int sel [NB];
      for (int k = 0; k < NB; k++) begin
        sel[k] = $urandom_range(0, D - 1);
        raddr[k] <= 3'(sel[k]);
      end
      @(posedge clk);
      #1;
      for (int k = 0; k < NB; k++) begin
        checks++;
        if (rdata[k] !== model[sel[k] * NB + k]) begin
          failures++;
          if (failures < 20) $display("FAIL bank %0d entry %0d: %h exp %h", k, sel[k], rdata[k], model[sel[k]*NB+k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
