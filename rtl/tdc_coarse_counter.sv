`timescale 1ps / 1ps
// tdc_coarse_counter: coarse time base of the TDC.
//
// Counts system clock cycles; the count is the integer part of every
// timestamp. rst_i (synchronous) clears it to zero, so the user can align it
// with an external time reference. overflow_o is a one-cycle pulse, in the
// cycle where value_o has wrapped to zero by counting (not by reset), which
// lets the user extend the count beyond COARSE_W bits.
module tdc_coarse_counter #(
  parameter int unsigned COARSE_W = 25
) (
  input  logic                clk_i,
  input  logic                rst_i,
  output logic [COARSE_W-1:0] value_o,
  output logic                overflow_o
);
  always_ff @(posedge clk_i) begin
    if (rst_i) begin
      value_o    <= '0;
      overflow_o <= 1'b0;
    end else begin
      value_o    <= value_o + 1'b1;
      overflow_o <= &value_o;
    end
  end
endmodule
