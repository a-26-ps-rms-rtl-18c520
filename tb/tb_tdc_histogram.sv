`timescale 1ps / 1ps
// tb_tdc_histogram: increments random bins by read-modify-write, as the
// controller does, and compares every bin with a reference array.
module tb_tdc_histogram;
  localparam int AW = 10, HW = 18;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [AW-1:0] a;
  logic we;
  logic [HW-1:0] d, q;
  int model [2**AW];

  tdc_histogram #(.AW(AW), .HIS_W(HW)) dut (.clk_i(clk), .a_i(a), .we_i(we), .d_i(d), .q_o(q));

  always #4000 clk = ~clk;

  initial begin
    #200000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; a = 0; d = 0;
    for (int i = 0; i < 2**AW; i++) model[i] = 0;
    for (int k = 0; k < 3000; k++) begin
      logic [AW-1:0] b;
      b = AW'($urandom % 64);
      @(negedge clk); a = b; we = 0;
      @(negedge clk); d = q + 1'b1; we = 1;
      model[b]++;
    end
    @(negedge clk) we = 0;
    for (int i = 0; i < 2**AW; i++) begin
      @(negedge clk) a = AW'(i);
      @(posedge clk); #1;
      checks++;
      if (int'(q) != model[i]) begin failures++; $display("FAIL bin %0d=%0d exp %0d", i, q, model[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
