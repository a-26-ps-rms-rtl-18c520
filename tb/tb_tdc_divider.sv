`timescale 1ps / 1ps
// tb_tdc_divider: the sequential divider at the sizes the controller uses by
// default (31-bit dividend, 17-bit divisor). 2000 random divisions plus edge
// cases (divisor 1, dividend 0, dividend below divisor, all-ones operands,
// divisor 0) are compared with the integer division done here, and the number
// of clock edges from the one that samples start_i to the one after which
// done_o is high is checked (DW + 1, counting both).
module tb_tdc_divider;
  localparam int DW = 31, VW = 17;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1, start = 0, done;
  logic [DW-1:0] a, q;
  logic [VW-1:0] b;

  tdc_divider #(.DW(DW), .VW(VW)) dut (
    .clk_i(clk), .rst_i(rst), .start_i(start), .dividend_i(a), .divisor_i(b),
    .done_o(done), .quotient_o(q));

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic divide(input logic [DW-1:0] x, input logic [VW-1:0] y);
    int n;
    logic [DW-1:0] e;
    @(negedge clk) start = 1; a = x; b = y;
    @(negedge clk) start = 0;
    n = 1;
    while (!done) begin @(negedge clk); n++; end
    e = (y == 0) ? '1 : x / DW'(y);
    checks += 2;
    if (q !== e) begin failures++; $display("FAIL %0d / %0d = %0d, expected %0d", x, y, q, e); end
    if (n != DW + 1) begin failures++; $display("FAIL took %0d cycles", n); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    divide(31'd12345678, 17'd1);
    divide(31'd0, 17'd2900);
    divide(31'd100, 17'd2900);
    divide('1, '1);
    divide('1, 17'd1);
    divide(31'd5, 17'd0);
    for (int i = 0; i < 2000; i++) begin
      logic [VW-1:0] y;
      y = VW'($urandom);
      if (i % 2 == 0) y = 17'd2800 + VW'($urandom % 300);   // oscillator-count range
      divide(DW'($urandom), y);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
