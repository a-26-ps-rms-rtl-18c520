`timescale 1ps / 1ps
// tdc: time-to-digital converter core, top level.
//
// Every edge, rising or falling, of each signal_i[c] is timestamped as a
// fixed-point number of system clock cycles (COARSE_W integer bits, FP_W
// fractional bits) plus the channel's deskew constant. A coarse counter gives
// the integer part; the fractional part comes from how far the edge travelled
// along a 496-tap carry-chain delay line before the sampling clock edge,
// converted to time by a per-channel look-up table.
//
// After rst_i the controller calibrates each channel from a free-running
// on-chip ring oscillator (calibration signal, uniformly distributed relative
// to the system clock) and raises ready_o. From then on it keeps correcting
// the tables for temperature and voltage drift, measured with each channel's
// own ring oscillator, without interrupting the measurements.
//
// Per channel outputs, valid in the cycle where detect_o[c] is high, six
// clock cycles after the edge was sampled: polarity_o (1 = rising edge),
// raw_o (uncalibrated tap index) and fp_o (calibrated timestamp). Two edges of
// one channel must be at least DEADTIME cycles apart. cc_rst_i clears the
// coarse counter, cc_cy_o pulses when it wraps. The dbg_* ports read back the
// calibration tables and oscillator frequencies (see tdc_controller).
module tdc #(
  parameter int unsigned CHANNELS     = tdc_pkg::CHANNELS_DEF,
  parameter int unsigned CARRY4_COUNT = tdc_pkg::CARRY4_COUNT_DEF,
  parameter int unsigned RAW_W        = tdc_pkg::RAW_W_DEF,
  parameter int unsigned FP_W         = tdc_pkg::FP_W_DEF,
  parameter int unsigned EXHIS_W      = tdc_pkg::EXHIS_W_DEF,
  parameter int unsigned COARSE_W     = tdc_pkg::COARSE_W_DEF,
  parameter int unsigned FCOUNT_W     = tdc_pkg::FCOUNT_W_DEF,
  parameter int unsigned FTIMER_W     = tdc_pkg::FTIMER_W_DEF,
  parameter int unsigned DEADTIME     = tdc_pkg::DEADTIME_DEF,
  parameter int unsigned RO_HALF_PS   = 22600,   // channel ring oscillators
  parameter int unsigned CAL_HALF_PS  = 24701,   // calibration ring oscillator
  localparam int unsigned CHAN_W      = (CHANNELS > 1) ? $clog2(CHANNELS) : 1,
  localparam int unsigned HIS_W       = FP_W + EXHIS_W + 1,
  localparam int unsigned TS_W        = COARSE_W + FP_W
) (
  input  logic                clk_i,
  input  logic                rst_i,
  output logic                ready_o,
  input  logic                cc_rst_i,
  output logic                cc_cy_o,
  input  logic [CHANNELS-1:0] signal_i,
  input  logic [TS_W-1:0]     deskew_i   [CHANNELS],
  output logic [CHANNELS-1:0] detect_o,
  output logic [CHANNELS-1:0] polarity_o,
  output logic [RAW_W-1:0]    raw_o      [CHANNELS],
  output logic [TS_W-1:0]     fp_o       [CHANNELS],
  input  logic                dbg_req_i,
  input  logic [CHAN_W-1:0]   dbg_chan_i,
  input  logic [RAW_W-1:0]    dbg_addr_i,
  output logic                dbg_ack_o,
  output logic [FP_W-1:0]     dbg_lut_o,
  output logic [HIS_W-1:0]    dbg_his_o,
  output logic [FCOUNT_W-1:0] dbg_freq_o  [CHANNELS],
  output logic [FCOUNT_W-1:0] dbg_freq0_o [CHANNELS]
);
  logic                    calib;
  logic [CHANNELS-1:0]     calib_sel, enc_detect, lut_we;
  logic [RAW_W-1:0]        enc_raw [CHANNELS];
  logic [CHAN_W+RAW_W-1:0] his_a;
  logic                    his_we;
  logic [HIS_W-1:0]        his_d, his_q;
  logic [CHAN_W-1:0]       fc_sel;
  logic                    fc_start, fc_done;
  logic [FCOUNT_W-1:0]     fc_count;
  logic [RAW_W-1:0]        lut_a;
  logic [FP_W-1:0]         lut_d;
  logic [FP_W-1:0]         lut_q [CHANNELS];

  tdc_ringosc #(.HALF_PERIOD_PS(CAL_HALF_PS)) u_calosc (.en_i(1'b1), .clk_o(calib));

  tdc_channelbank #(
    .CHANNELS(CHANNELS), .CARRY4_COUNT(CARRY4_COUNT), .RAW_W(RAW_W), .FP_W(FP_W),
    .EXHIS_W(EXHIS_W), .COARSE_W(COARSE_W), .FCOUNT_W(FCOUNT_W), .FTIMER_W(FTIMER_W),
    .DEADTIME(DEADTIME), .RO_HALF_PS(RO_HALF_PS)
  ) u_bank (
    .clk_i, .rst_i, .cc_rst_i, .cc_cy_o,
    .signal_i, .calib_i(calib), .deskew_i,
    .detect_o, .polarity_o, .raw_o, .fp_o,
    .calib_sel_i(calib_sel), .enc_detect_o(enc_detect), .enc_raw_o(enc_raw),
    .his_a_i(his_a), .his_we_i(his_we), .his_d_i(his_d), .his_q_o(his_q),
    .fc_sel_i(fc_sel), .fc_start_i(fc_start), .fc_done_o(fc_done), .fc_count_o(fc_count),
    .lut_a_i(lut_a), .lut_we_i(lut_we), .lut_d_i(lut_d), .lut_q_o(lut_q));

  tdc_controller #(
    .CHANNELS(CHANNELS), .RAW_W(RAW_W), .FP_W(FP_W), .EXHIS_W(EXHIS_W), .FCOUNT_W(FCOUNT_W)
  ) u_ctl (
    .clk_i, .rst_i, .ready_o,
    .calib_sel_o(calib_sel), .detect_i(enc_detect), .raw_i(enc_raw),
    .his_a_o(his_a), .his_we_o(his_we), .his_d_o(his_d), .his_q_i(his_q),
    .fc_sel_o(fc_sel), .fc_start_o(fc_start), .fc_done_i(fc_done), .fc_count_i(fc_count),
    .lut_a_o(lut_a), .lut_we_o(lut_we), .lut_d_o(lut_d), .lut_q_i(lut_q),
    .dbg_req_i, .dbg_chan_i, .dbg_addr_i, .dbg_ack_o, .dbg_lut_o, .dbg_his_o,
    .dbg_freq_o, .dbg_freq0_o);
endmodule
