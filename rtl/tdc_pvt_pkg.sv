`timescale 1ps / 1ps
// tdc_pvt_pkg: simulation environment of the behavioural models.
//
// The carry-chain delay line and the ring oscillators are physical FPGA
// structures whose delays drift with temperature and supply voltage. Their
// behavioural models (tdc_carry_chain, tdc_ringosc) multiply every delay by
// delay_scale, so a testbench can emulate a temperature change by setting it
// (1.0 = the conditions at which the nominal delays hold). Not synthesizable,
// and not part of any real port list.
package tdc_pvt_pkg;
  real delay_scale = 1.0;
endpackage
