`timescale 1ps / 1ps
// tdc_encoder: edge detector and thermometer encoder of a channel.
//
// The sorted delay line holds, after each clock edge, a run of taps that the
// newest signal transition has already reached, starting at the first tap
// (bit N-1), followed by taps still at the old level. The encoder
//   * detects a transition when the first tap differs from its value one
//     cycle earlier, the polarity being the new level (1 = rising edge);
//   * counts the bits equal to the first tap from the start of the line; the
//     raw value is n = N - count, the index of the last tap reached, so that a
//     hit "at output n" has the numbering of the calibration equations.
// After a detection, further detections are suppressed for DEADTIME-1 cycles
// (dead time DEADTIME, 3 in the original core, whose cause is not described;
// here it also gives the histogram update three cycles per hit).
//
// Pipeline: two register stages. Stage 1 registers the detection and, for
// each group of G taps, whether the whole group equals the first tap and the
// length of its leading run; stage 2 finds the first group that breaks the run
// and registers raw_o, detect_o (one-cycle pulse) and polarity_o.
module tdc_encoder #(
  parameter int unsigned TAPS     = 496,
  parameter int unsigned RAW_W    = 9,
  parameter int unsigned DEADTIME = 3,
  parameter int unsigned G        = 16
) (
  input  logic             clk_i,
  input  logic             rst_i,
  input  logic [TAPS-1:0]  line_i,
  output logic             detect_o,
  output logic             polarity_o,
  output logic [RAW_W-1:0] raw_o
);
  localparam int unsigned NG   = (TAPS + G - 1) / G;
  localparam int unsigned CW   = $clog2(G + 1);
  localparam int unsigned TW   = $clog2(TAPS + 1);
  localparam int unsigned HW   = (DEADTIME > 1) ? $clog2(DEADTIME) : 1;

  logic           first_q;
  logic [HW-1:0]  holdoff_q;
  logic           det1_q, pol1_q;
  logic [NG-1:0]  full1_q;
  logic [CW-1:0]  cnt1_q [NG];

  // Line extended to whole groups; padding bits count as "not reached".
  logic [NG*G-1:0] ext;
  always_comb begin
    ext = '0;
    ext[NG*G-1 -: TAPS] = line_i;
    for (int i = 0; i < int'(NG*G) - int'(TAPS); i++) ext[i] = ~line_i[TAPS-1];
  end

  // Stage 1
  always_ff @(posedge clk_i) begin
    logic det;
    logic run;
    logic [CW-1:0] c;
    if (rst_i) begin
      first_q   <= 1'b0;
      holdoff_q <= '0;
      det1_q    <= 1'b0;
    end else begin
      first_q <= line_i[TAPS-1];
      det = (line_i[TAPS-1] != first_q) && (holdoff_q == '0);
      det1_q <= det;
      if (det) holdoff_q <= HW'(DEADTIME - 1);
      else if (holdoff_q != '0) holdoff_q <= holdoff_q - 1'b1;
    end
    pol1_q <= line_i[TAPS-1];
    for (int unsigned g = 0; g < NG; g++) begin
      run = 1'b1;
      c   = '0;
      for (int unsigned i = 0; i < G; i++) begin
        run = run && (ext[NG*G - 1 - g*G - i] == line_i[TAPS-1]);
        if (run) c = c + 1'b1;
      end
      full1_q[g] <= run;
      cnt1_q[g]  <= c;
    end
  end

  // Stage 2
  always_ff @(posedge clk_i) begin
    logic [TW-1:0] count;
    logic          found;
    count = TW'(TAPS);
    found = 1'b0;
    for (int unsigned g = 0; g < NG; g++) begin
      if (!found && !full1_q[g]) begin
        count = TW'(g * G) + TW'(cnt1_q[g]);
        found = 1'b1;
      end
    end
    if (rst_i) detect_o <= 1'b0;
    else       detect_o <= det1_q;
    polarity_o <= pol1_q;
    raw_o      <= RAW_W'(TW'(TAPS) - count);
  end
endmodule
