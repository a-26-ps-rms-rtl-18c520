`timescale 1ps / 1ps
// tdc_pkg: constants and types shared by the TDC core.
//
// The delay line length (124 CARRY4 cells, 496 taps) and the channel count (2)
// are the configuration the core was measured in. The widths of the raw value
// (RAW_W), of the fractional part (F, FP_W), the number of extra histogram
// bits (P, EXHIS_W), the coarse counter width and the frequency counter sizes
// are not fixed by the original description; the values below are this
// design's choice. F = 13 gives a fractional LSB of 8 ns / 8192 = ~1 ps at a
// 125 MHz system clock, well below the tap size.
package tdc_pkg;
  localparam int unsigned CHANNELS_DEF     = 2;
  localparam int unsigned CARRY4_COUNT_DEF = 124;
  localparam int unsigned RAW_W_DEF        = 9;   // ceil(log2(496))
  localparam int unsigned FP_W_DEF         = 13;  // F: fractional bits
  localparam int unsigned EXHIS_W_DEF      = 4;   // P: extra histogram bits
  localparam int unsigned COARSE_W_DEF     = 25;  // coarse counter bits
  localparam int unsigned FCOUNT_W_DEF     = 13;  // ring oscillator count bits
  localparam int unsigned FTIMER_W_DEF     = 14;  // frequency counter period = 2^FTIMER_W cycles
  localparam int unsigned DEADTIME_DEF     = 3;   // cycles between two detections
endpackage
