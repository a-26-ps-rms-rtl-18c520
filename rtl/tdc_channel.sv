`timescale 1ps / 1ps
// tdc_channel: one channel of the TDC.
//
// Datapath, one stage per clock:
//   input mux -> carry-chain delay line, sampled by the slice flip-flops (1)
//   -> second sampling row and tap reordering (2) -> encoder (3, 4)
//   -> look-up table read (5) -> deskew (6).
// So the calibrated timestamp leaves six clock edges after the edge that
// sampled the event, the latency of the original core. detect_o, polarity_o
// and raw_o are delayed to come out in the same cycle as fp_o. The coarse time
// (coarse_i, the coarse counter output) is delayed four cycles so that it is
// the count of the sampling edge when it meets the LUT output.
//
// The ring oscillator placed next to the delay line is part of the channel;
// its output ro_clk_o goes to the shared frequency counter. The encoder's
// detection and raw value also go straight to the controller (enc_detect_o,
// enc_raw_o) for the startup histogram, and the LUT's second port is the
// controller's load port (lut_*).
//
// fp_o is a fixed-point number: COARSE_W integer bits (clock cycles) and FP_W
// fractional bits. polarity_o is 1 for a rising edge.
module tdc_channel #(
  parameter int unsigned CARRY4_COUNT   = 124,
  parameter int unsigned RAW_W          = 9,
  parameter int unsigned FP_W           = 13,
  parameter int unsigned COARSE_W       = 25,
  parameter int unsigned DEADTIME       = 3,
  parameter int unsigned RO_HALF_PS     = 22600,
  parameter int unsigned SEED           = 1
) (
  input  logic                     clk_i,
  input  logic                     rst_i,
  input  logic                     signal_i,
  input  logic                     calib_i,
  input  logic                     sel_i,
  input  logic [COARSE_W-1:0]      coarse_i,
  input  logic [COARSE_W+FP_W-1:0] deskew_i,
  output logic                     detect_o,
  output logic                     polarity_o,
  output logic [RAW_W-1:0]         raw_o,
  output logic [COARSE_W+FP_W-1:0] fp_o,
  output logic                     enc_detect_o,
  output logic [RAW_W-1:0]         enc_raw_o,
  output logic                     ro_clk_o,
  input  logic [RAW_W-1:0]         lut_a_i,
  input  logic                     lut_we_i,
  input  logic [FP_W-1:0]          lut_d_i,
  output logic [FP_W-1:0]          lut_q_o
);
  localparam int unsigned TAPS = 4 * CARRY4_COUNT;

  logic                dl_in;
  logic [TAPS-1:0]     taps, line;
  logic                enc_pol;
  logic [FP_W-1:0]     frac;
  logic                det_q;
  logic [1:0]          pol_q;
  logic [RAW_W-1:0]    raw_q [2];
  logic [COARSE_W-1:0] cc_q  [4];

  tdc_inmux u_mux (.sig_i(signal_i), .calib_i, .sel_i, .o(dl_in));

  tdc_carry_chain #(.CARRY4_COUNT(CARRY4_COUNT), .SEED(SEED)) u_chain (
    .clk_i, .sig_i(dl_in), .taps_o(taps));

  tdc_reorder #(.CARRY4_COUNT(CARRY4_COUNT)) u_reorder (
    .clk_i, .taps_i(taps), .line_o(line));

  tdc_encoder #(.TAPS(TAPS), .RAW_W(RAW_W), .DEADTIME(DEADTIME)) u_enc (
    .clk_i, .rst_i, .line_i(line),
    .detect_o(enc_detect_o), .polarity_o(enc_pol), .raw_o(enc_raw_o));

  tdc_lut #(.RAW_W(RAW_W), .FP_W(FP_W)) u_lut (
    .clk_i, .ra_i(enc_raw_o), .rd_o(frac),
    .ca_i(lut_a_i), .cwe_i(lut_we_i), .cwd_i(lut_d_i), .crd_o(lut_q_o));

  always_ff @(posedge clk_i) begin
    det_q    <= rst_i ? 1'b0 : enc_detect_o;
    pol_q    <= {pol_q[0], enc_pol};
    raw_q[0] <= enc_raw_o;
    raw_q[1] <= raw_q[0];
    cc_q[0]  <= coarse_i;
    for (int i = 1; i < 4; i++) cc_q[i] <= cc_q[i-1];
  end

  tdc_deskew #(.COARSE_W(COARSE_W), .FP_W(FP_W)) u_deskew (
    .clk_i, .rst_i, .detect_i(det_q), .coarse_i(cc_q[3]), .frac_i(frac),
    .deskew_i, .detect_o, .ts_o(fp_o));

  always_comb begin
    polarity_o = pol_q[1];
    raw_o      = raw_q[1];
  end

  tdc_ringosc #(.HALF_PERIOD_PS(RO_HALF_PS)) u_ro (.en_i(1'b1), .clk_o(ro_clk_o));
endmodule
