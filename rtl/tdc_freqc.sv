`timescale 1ps / 1ps
// tdc_freqc: frequency counter for the channels' ring oscillators.
//
// Shared by all channels. On start_i it measures the oscillator selected by
// sel_i: the oscillator output is brought into the system clock domain through
// a two-flip-flop synchroniser and its rising edges are counted during
// 2^FTIMER_W system clock cycles. done_o then pulses for one cycle and count_o
// holds the number of oscillator cycles per counter period (saturating at
// 2^FCOUNT_W-1). Edge counting after resynchronisation requires the
// oscillator to run below half the system clock frequency; this method is
// this design's choice. sel_i must stay stable during a measurement.
module tdc_freqc #(
  parameter int unsigned CHANNELS  = 2,
  parameter int unsigned FCOUNT_W  = 13,
  parameter int unsigned FTIMER_W  = 14,
  localparam int unsigned CHAN_W   = (CHANNELS > 1) ? $clog2(CHANNELS) : 1
) (
  input  logic                clk_i,
  input  logic                rst_i,
  input  logic [CHANNELS-1:0] ro_i,
  input  logic [CHAN_W-1:0]   sel_i,
  input  logic                start_i,
  output logic                done_o,
  output logic [FCOUNT_W-1:0] count_o
);
  logic                ro_sel;
  logic [2:0]          sync_q;
  logic                busy_q;
  logic [FTIMER_W-1:0] timer_q;
  logic [FCOUNT_W-1:0] cnt_q;

  always_comb ro_sel = ro_i[sel_i];

  always_ff @(posedge clk_i) sync_q <= {sync_q[1:0], ro_sel};

  always_ff @(posedge clk_i) begin
    done_o <= 1'b0;
    if (rst_i) begin
      busy_q  <= 1'b0;
      timer_q <= '0;
      cnt_q   <= '0;
      count_o <= '0;
    end else if (start_i && !busy_q) begin
      busy_q  <= 1'b1;
      timer_q <= '1;
      cnt_q   <= '0;
    end else if (busy_q) begin
      if (sync_q[1] && !sync_q[2] && !(&cnt_q)) cnt_q <= cnt_q + 1'b1;
      if (timer_q == '0) begin
        busy_q  <= 1'b0;
        done_o  <= 1'b1;
        count_o <= cnt_q;
      end else begin
        timer_q <= timer_q - 1'b1;
      end
    end
  end
endmodule
