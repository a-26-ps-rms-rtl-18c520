`timescale 1ps / 1ps
// tb_tdc_coarse_counter: counting, wrap with overflow pulse, synchronous reset
// (4-bit counter to reach the wrap quickly).
module tb_tdc_coarse_counter;
  localparam int CW = 4;
  int checks = 0, failures = 0, ovf = 0;
  logic clk = 0, rst;
  logic [CW-1:0] v;
  logic ov;
  int expv;
  bit wrapped;

  tdc_coarse_counter #(.COARSE_W(CW)) dut (.clk_i(clk), .rst_i(rst), .value_o(v), .overflow_o(ov));

  always #4000 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1;
    @(posedge clk); @(negedge clk);
    rst = 0;
    expv = 0; wrapped = 0;
    for (int k = 0; k < 100; k++) begin
      checks += 2;
      if (int'(v) != expv) begin failures++; $display("FAIL v=%0d exp %0d", v, expv); end
      if (ov !== wrapped) begin failures++; $display("FAIL ov=%0b at v=%0d", ov, v); end
      if (ov) ovf++;
      if (k == 37) rst = 1;
      @(negedge clk);
      wrapped = 0;
      if (rst) begin rst = 0; expv = 0; end
      else begin expv = (expv + 1) % (1 << CW); wrapped = (expv == 0); end
    end
    checks++;
    if (ovf < 4) begin failures++; $display("FAIL only %0d overflows", ovf); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
