`timescale 1ps / 1ps
// tdc_ringosc: behavioural model of a ring oscillator (not synthesizable).
//
// In the FPGA each channel owns a ring oscillator made of many LUTs in series,
// placed in the SLICEX columns right beside its delay line so that both see
// the same temperature and supply; its frequency is the "online calibration
// clock" that the controller measures. The same kind of free-running
// oscillator, asynchronous to the system clock, provides the random
// calibration pulses for the startup calibration.
//
// Interface: while en_i is high, clk_o toggles every HALF_PERIOD_PS
// picoseconds times tdc_pvt_pkg::delay_scale; while en_i is low clk_o stays 0.
// The default half period (22.6 ns) is this model's choice: counted over
// 2^14 cycles of an 8 ns system clock it gives about 2900 counts, the scale
// of frequencies reported by the original core.
module tdc_ringosc #(
  parameter int unsigned HALF_PERIOD_PS = 22600
) (
  input  logic en_i,
  output logic clk_o
);
  initial clk_o = 1'b0;

  always begin
    #(real'(HALF_PERIOD_PS) * tdc_pvt_pkg::delay_scale);
    clk_o = en_i ? ~clk_o : 1'b0;
  end
endmodule
