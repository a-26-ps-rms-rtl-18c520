`timescale 1ps / 1ps
// tdc_deskew: final stage of a channel.
//
// The fractional value from the LUT is the time from the event to the clock
// edge that sampled it, counted backwards. The timestamp is therefore the
// coarse count of that clock edge, as a fixed-point number with FP_W bits
// after the radix point, minus the fractional value; the user constant
// deskew_i is then added so that timestamps can refer directly to the origin
// of the system clock. Arithmetic wraps modulo 2^(COARSE_W+FP_W).
// One register stage; detect_i is delayed along with the value and cleared
// by rst_i.
module tdc_deskew #(
  parameter int unsigned COARSE_W = 25,
  parameter int unsigned FP_W     = 13
) (
  input  logic                       clk_i,
  input  logic                       rst_i,
  input  logic                       detect_i,
  input  logic [COARSE_W-1:0]        coarse_i,
  input  logic [FP_W-1:0]            frac_i,
  input  logic [COARSE_W+FP_W-1:0]   deskew_i,
  output logic                       detect_o,
  output logic [COARSE_W+FP_W-1:0]   ts_o
);
  always_ff @(posedge clk_i) begin
    detect_o <= rst_i ? 1'b0 : detect_i;
    ts_o     <= {coarse_i, {FP_W{1'b0}}} - (COARSE_W+FP_W)'(frac_i) + deskew_i;
  end
endmodule
