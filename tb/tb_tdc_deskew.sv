`timescale 1ps / 1ps
// tb_tdc_deskew: random coarse, fractional and deskew values against
// coarse - frac + deskew computed in the testbench.
module tb_tdc_deskew;
  localparam int CW = 25, FW = 13, TW = CW + FW;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic det_i, det_o;
  logic [CW-1:0] coarse;
  logic [FW-1:0] frac;
  logic [TW-1:0] dsk, ts;

  tdc_deskew #(.COARSE_W(CW), .FP_W(FW)) dut (
    .clk_i(clk), .rst_i(1'b0), .detect_i(det_i), .coarse_i(coarse), .frac_i(frac), .deskew_i(dsk),
    .detect_o(det_o), .ts_o(ts));

  always #4000 clk = ~clk;

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 500; k++) begin
      longint unsigned e;
      @(negedge clk);
      det_i = 1'($urandom); coarse = CW'($urandom); frac = FW'($urandom);
      dsk = {6'($urandom), 32'($urandom)};
      e = (longint'(coarse) * 8192 - longint'(frac) + longint'(dsk)) % (64'd1 << TW);
      @(posedge clk); #1;
      checks += 2;
      if (ts !== TW'(e)) begin failures++; $display("FAIL ts=%h exp %h", ts, e); end
      if (det_o !== det_i) begin failures++; $display("FAIL detect"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
