`timescale 1ps / 1ps
// tdc_controller: calibration controller shared by all channels.
//
// Startup calibration, for each channel in turn:
//   1. clear the channel's histogram;
//   2. switch its input multiplexer to the calibration signal, let it settle
//      for SETTLE cycles, then book every detected edge into the histogram
//      (read-modify-write, two cycles per hit) until C = 2^(F+P) hits;
//   3. switch back to the user signal and measure the channel's ring
//      oscillator frequency; this is the reference f0;
//   4. run a LUT pass (below) with f = f0.
// Ready_o rises when all channels are calibrated. From then on the
// controller loops over the channels forever (online calibration): measure
// the ring oscillator frequency f, then run a LUT pass. Between two passes it
// serves debug reads while it waits for a frequency measurement, the only
// time the memory ports are idle for long.
//
// LUT pass: for n from 2^RAW_W-1 down to 0, S(n) = sum of H(i) for i >= n is
// accumulated and LUT[n] = min(floor(S(n) * f0 / (f * 2^P)), 2^F - 1) is
// written through the LUT's second port, while the datapath keeps reading the
// first one. In units of 2^-F clock periods S(n)/2^P is the startup delay
// R0(n) = Tsys/C * sum_{i=n}^{N-1} H(i), and the factor f0/f is the linear
// correction of online calibration; both formulas and the saturation at
// 1 - 2^-F follow the original design. A sequential divider computes each
// entry in about DW+4 cycles. The histogram layout (one per channel), the
// order of the steps, the settling time and the debug handshake are this
// design's choices.
//
// Debug: with dbg_req_i held high, the controller reads LUT[dbg_addr_i] and
// H(dbg_addr_i) of channel dbg_chan_i and pulses dbg_ack_o with the values on
// dbg_lut_o / dbg_his_o (they hold until the next request). Requests are
// served during frequency measurements (2^FTIMER_W cycles out of every pass),
// three cycles each; a request made during a LUT pass waits for the next one. dbg_freq_o and
// dbg_freq0_o give the last measured and the reference frequency of each
// channel, in oscillator cycles per frequency counter period.
module tdc_controller #(
  parameter int unsigned CHANNELS = 2,
  parameter int unsigned RAW_W    = 9,
  parameter int unsigned FP_W     = 13,
  parameter int unsigned EXHIS_W  = 4,
  parameter int unsigned FCOUNT_W = 13,
  parameter int unsigned SETTLE   = 8,
  localparam int unsigned CHAN_W  = (CHANNELS > 1) ? $clog2(CHANNELS) : 1,
  localparam int unsigned HIS_W   = FP_W + EXHIS_W + 1
) (
  input  logic                clk_i,
  input  logic                rst_i,
  output logic                ready_o,
  // channels
  output logic [CHANNELS-1:0] calib_sel_o,
  input  logic [CHANNELS-1:0] detect_i,
  input  logic [RAW_W-1:0]    raw_i [CHANNELS],
  // histogram memory
  output logic [CHAN_W+RAW_W-1:0] his_a_o,
  output logic                his_we_o,
  output logic [HIS_W-1:0]    his_d_o,
  input  logic [HIS_W-1:0]    his_q_i,
  // frequency counter
  output logic [CHAN_W-1:0]   fc_sel_o,
  output logic                fc_start_o,
  input  logic                fc_done_i,
  input  logic [FCOUNT_W-1:0] fc_count_i,
  // LUT load port, shared address and data, one write enable per channel
  output logic [RAW_W-1:0]    lut_a_o,
  output logic [CHANNELS-1:0] lut_we_o,
  output logic [FP_W-1:0]     lut_d_o,
  input  logic [FP_W-1:0]     lut_q_i [CHANNELS],
  // debug
  input  logic                dbg_req_i,
  input  logic [CHAN_W-1:0]   dbg_chan_i,
  input  logic [RAW_W-1:0]    dbg_addr_i,
  output logic                dbg_ack_o,
  output logic [FP_W-1:0]     dbg_lut_o,
  output logic [HIS_W-1:0]    dbg_his_o,
  output logic [FCOUNT_W-1:0] dbg_freq_o  [CHANNELS],
  output logic [FCOUNT_W-1:0] dbg_freq0_o [CHANNELS]
);
  localparam int unsigned DW = HIS_W + FCOUNT_W;     // S(n) * f0
  localparam int unsigned VW = FCOUNT_W + EXHIS_W;   // f * 2^P
  localparam logic [HIS_W-1:0] C = HIS_W'(1) << (FP_W + EXHIS_W);
  localparam int unsigned SW = $clog2(SETTLE + 1);

  typedef enum logic [3:0] {
    S_HCLR, S_SETTLE, S_COLLECT, S_FSTART, S_FWAIT,
    S_LREAD, S_LACC, S_LDIV, S_LWRITE, S_IDLE, S_DBG1, S_DBG2
  } state_t;

  state_t              state_q;
  logic                online_q;    // 0 during startup calibration
  logic [CHAN_W-1:0]   chan_q;
  logic [RAW_W-1:0]    idx_q;
  logic [SW-1:0]       settle_q;
  logic [HIS_W-1:0]    hits_q;
  logic                hit_pend_q;
  logic [RAW_W-1:0]    hit_raw_q;
  logic [HIS_W-1:0]    acc_q;
  logic [FCOUNT_W-1:0] f_q;
  logic [FCOUNT_W-1:0] freq0_q [CHANNELS];
  logic                fdone_q;     // frequency counter result waiting
  logic                div_start;
  logic [DW-1:0]       div_q;
  logic                div_done;
  logic [HIS_W-1:0]    acc_next;

  always_comb acc_next = acc_q + his_q_i;

  tdc_divider #(.DW(DW), .VW(VW)) u_div (
    .clk_i, .rst_i,
    .start_i    (div_start),
    .dividend_i (DW'(acc_next) * DW'(freq0_q[chan_q])),
    .divisor_i  (VW'(f_q) << EXHIS_W),
    .done_o     (div_done),
    .quotient_o (div_q)
  );

  // Memory port addressing follows the state.
  always_comb begin
    his_a_o    = {chan_q, idx_q};
    his_we_o   = 1'b0;
    his_d_o    = '0;
    lut_a_o    = idx_q;
    lut_we_o   = '0;
    lut_d_o    = (div_q > DW'({FP_W{1'b1}})) ? {FP_W{1'b1}} : div_q[FP_W-1:0];
    fc_sel_o   = chan_q;
    fc_start_o = (state_q == S_FSTART);
    div_start  = (state_q == S_LACC);
    unique case (state_q)
      S_HCLR:    his_we_o = 1'b1;
      S_COLLECT: begin
        if (hit_pend_q) begin
          his_a_o  = {chan_q, hit_raw_q};
          his_we_o = 1'b1;
          his_d_o  = his_q_i + 1'b1;
        end else begin
          his_a_o  = {chan_q, raw_i[chan_q]};
        end
      end
      S_LWRITE:  lut_we_o[chan_q] = 1'b1;
      S_DBG1, S_DBG2: begin
        his_a_o = {dbg_chan_i, dbg_addr_i};
        lut_a_o = dbg_addr_i;
      end
      default: ;
    endcase
  end

  always_comb begin
    calib_sel_o = '0;
    if (state_q == S_SETTLE || state_q == S_COLLECT) calib_sel_o[chan_q] = 1'b1;
  end

  always_ff @(posedge clk_i) begin
    dbg_ack_o <= 1'b0;
    if (rst_i) begin
      state_q    <= S_HCLR;
      online_q   <= 1'b0;
      ready_o    <= 1'b0;
      chan_q     <= '0;
      idx_q      <= '0;
      settle_q   <= '0;
      hits_q     <= '0;
      hit_pend_q <= 1'b0;
      acc_q      <= '0;
      f_q        <= '0;
      dbg_lut_o  <= '0;
      dbg_his_o  <= '0;
      for (int c = 0; c < CHANNELS; c++) begin
        freq0_q[c]    <= '0;
        dbg_freq_o[c] <= '0;
      end
    end else begin
      unique case (state_q)
        S_HCLR: begin
          idx_q <= idx_q + 1'b1;
          if (&idx_q) begin
            settle_q <= SW'(SETTLE);
            state_q  <= S_SETTLE;
          end
        end
        S_SETTLE: begin
          settle_q <= settle_q - 1'b1;
          if (settle_q == '0) begin
            hits_q     <= '0;
            hit_pend_q <= 1'b0;
            state_q    <= S_COLLECT;
          end
        end
        S_COLLECT: begin
          if (hit_pend_q) begin
            hit_pend_q <= 1'b0;
            hits_q     <= hits_q + 1'b1;
            if (hits_q + 1'b1 == C) state_q <= S_FSTART;
          end else if (detect_i[chan_q]) begin
            hit_pend_q <= 1'b1;
            hit_raw_q  <= raw_i[chan_q];
          end
        end
        S_FSTART: state_q <= S_FWAIT;
        S_FWAIT: begin
          if (fdone_q) begin
            f_q                <= fc_count_i;
            dbg_freq_o[chan_q] <= fc_count_i;
            if (!online_q) freq0_q[chan_q] <= fc_count_i;
            idx_q   <= '1;
            acc_q   <= '0;
            state_q <= S_LREAD;
          end else if (dbg_req_i) begin
            state_q <= S_DBG1;
          end
        end
        S_LREAD: state_q <= S_LACC;
        S_LACC: begin
          acc_q   <= acc_next;
          state_q <= S_LDIV;
        end
        S_LDIV: if (div_done) state_q <= S_LWRITE;
        S_LWRITE: begin
          idx_q <= idx_q - 1'b1;
          if (idx_q != '0) begin
            state_q <= S_LREAD;
          end else begin
            idx_q <= '0;
            if (chan_q == CHAN_W'(CHANNELS - 1)) chan_q <= '0;
            else                                 chan_q <= chan_q + 1'b1;
            if (!online_q && chan_q != CHAN_W'(CHANNELS - 1)) begin
              state_q <= S_HCLR;
            end else begin
              online_q <= 1'b1;
              ready_o  <= 1'b1;
              state_q  <= S_IDLE;
            end
          end
        end
        S_IDLE: state_q <= S_FSTART;
        S_DBG1: state_q <= S_DBG2;
        S_DBG2: begin
          dbg_lut_o <= lut_q_i[dbg_chan_i];
          dbg_his_o <= his_q_i;
          dbg_ack_o <= 1'b1;
          state_q   <= S_FWAIT;
        end
        default: state_q <= S_HCLR;
      endcase
    end
  end

  // A frequency result that arrives while a debug read is served is kept.
  always_ff @(posedge clk_i) begin
    if (rst_i || state_q == S_FSTART) fdone_q <= 1'b0;
    else if (fc_done_i)               fdone_q <= 1'b1;
  end

  always_comb dbg_freq0_o = freq0_q;

  // Booking a hit takes two cycles; the encoder's dead time must cover it.
  a_hit_spacing: assert property (@(posedge clk_i) disable iff (rst_i)
    (state_q == S_COLLECT && hit_pend_q) |-> !detect_i[chan_q]);
endmodule
