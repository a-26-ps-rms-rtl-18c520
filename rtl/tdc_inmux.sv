`timescale 1ps / 1ps
// tdc_inmux: input multiplexer of a channel.
//
// Chooses what is injected into the delay line: the user signal in normal
// operation, the calibration signal while the controller runs the startup
// calibration of this channel. Purely combinational; sel_i = 1 selects the
// calibration signal (the encoding is this design's choice). In the FPGA this
// is one LUT packed with the input path into a single hand-placed slice.
module tdc_inmux (
  input  logic sig_i,
  input  logic calib_i,
  input  logic sel_i,
  output logic o
);
  always_comb o = sel_i ? calib_i : sig_i;
endmodule
