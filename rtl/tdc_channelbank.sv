`timescale 1ps / 1ps
// tdc_channelbank: the channels and the resources they share.
//
// Holds CHANNELS channels, the coarse counter that gives all of them their
// integer time, the histogram memory of the startup calibration and the
// frequency counter that measures the channels' ring oscillators. The
// controller drives everything through the ctl-side ports: one input-mux
// select per channel, the histogram port, the frequency counter and the LUT
// load port (address and data shared, write enable per channel). The
// calibration signal calib_i is common to all channels. Channel c uses seed
// c+1 for its delay-line model, so the channels have different tap delays.
module tdc_channelbank #(
  parameter int unsigned CHANNELS     = 2,
  parameter int unsigned CARRY4_COUNT = 124,
  parameter int unsigned RAW_W        = 9,
  parameter int unsigned FP_W         = 13,
  parameter int unsigned EXHIS_W      = 4,
  parameter int unsigned COARSE_W     = 25,
  parameter int unsigned FCOUNT_W     = 13,
  parameter int unsigned FTIMER_W     = 14,
  parameter int unsigned DEADTIME     = 3,
  parameter int unsigned RO_HALF_PS   = 22600,
  localparam int unsigned CHAN_W      = (CHANNELS > 1) ? $clog2(CHANNELS) : 1,
  localparam int unsigned HIS_W       = FP_W + EXHIS_W + 1,
  localparam int unsigned TS_W        = COARSE_W + FP_W
) (
  input  logic                    clk_i,
  input  logic                    rst_i,
  // coarse counter
  input  logic                    cc_rst_i,
  output logic                    cc_cy_o,
  // channels, user side
  input  logic [CHANNELS-1:0]     signal_i,
  input  logic                    calib_i,
  input  logic [TS_W-1:0]         deskew_i   [CHANNELS],
  output logic [CHANNELS-1:0]     detect_o,
  output logic [CHANNELS-1:0]     polarity_o,
  output logic [RAW_W-1:0]        raw_o      [CHANNELS],
  output logic [TS_W-1:0]         fp_o       [CHANNELS],
  // controller side
  input  logic [CHANNELS-1:0]     calib_sel_i,
  output logic [CHANNELS-1:0]     enc_detect_o,
  output logic [RAW_W-1:0]        enc_raw_o  [CHANNELS],
  input  logic [CHAN_W+RAW_W-1:0] his_a_i,
  input  logic                    his_we_i,
  input  logic [HIS_W-1:0]        his_d_i,
  output logic [HIS_W-1:0]        his_q_o,
  input  logic [CHAN_W-1:0]       fc_sel_i,
  input  logic                    fc_start_i,
  output logic                    fc_done_o,
  output logic [FCOUNT_W-1:0]     fc_count_o,
  input  logic [RAW_W-1:0]        lut_a_i,
  input  logic [CHANNELS-1:0]     lut_we_i,
  input  logic [FP_W-1:0]         lut_d_i,
  output logic [FP_W-1:0]         lut_q_o    [CHANNELS]
);
  logic [COARSE_W-1:0] coarse;
  logic [CHANNELS-1:0] ro;

  tdc_coarse_counter #(.COARSE_W(COARSE_W)) u_cc (
    .clk_i, .rst_i(cc_rst_i), .value_o(coarse), .overflow_o(cc_cy_o));

  for (genvar c = 0; c < CHANNELS; c++) begin : g_ch
    tdc_channel #(
      .CARRY4_COUNT(CARRY4_COUNT), .RAW_W(RAW_W), .FP_W(FP_W), .COARSE_W(COARSE_W),
      .DEADTIME(DEADTIME), .RO_HALF_PS(RO_HALF_PS + 97 * c), .SEED(c + 1)
    ) u_ch (
      .clk_i, .rst_i,
      .signal_i(signal_i[c]), .calib_i, .sel_i(calib_sel_i[c]),
      .coarse_i(coarse), .deskew_i(deskew_i[c]),
      .detect_o(detect_o[c]), .polarity_o(polarity_o[c]), .raw_o(raw_o[c]), .fp_o(fp_o[c]),
      .enc_detect_o(enc_detect_o[c]), .enc_raw_o(enc_raw_o[c]), .ro_clk_o(ro[c]),
      .lut_a_i, .lut_we_i(lut_we_i[c]), .lut_d_i, .lut_q_o(lut_q_o[c]));
  end

  tdc_histogram #(.AW(CHAN_W + RAW_W), .HIS_W(HIS_W)) u_his (
    .clk_i, .a_i(his_a_i), .we_i(his_we_i), .d_i(his_d_i), .q_o(his_q_o));

  tdc_freqc #(.CHANNELS(CHANNELS), .FCOUNT_W(FCOUNT_W), .FTIMER_W(FTIMER_W)) u_fc (
    .clk_i, .rst_i, .ro_i(ro), .sel_i(fc_sel_i), .start_i(fc_start_i),
    .done_o(fc_done_o), .count_o(fc_count_o));
endmodule
