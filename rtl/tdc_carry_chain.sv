`timescale 1ps / 1ps
// tdc_carry_chain: behavioural model of the carry-chain delay line (not synthesizable).
//
// In the FPGA the delay line is a column of CARRY4 cells whose S inputs are
// tied to 1, so every MUXCY just passes the carry on; the signal enters at the
// CYINIT pin of the bottom cell and each CO output is captured by the slice
// flip-flop beside it. This model stands in for that primitive structure and
// its flip-flops: it records when the input changed and, at each rising clock
// edge, sets tap k to the input level of delay(k) picoseconds earlier.
//
// Interface: sig_i is the signal injected at CYINIT, taps_o[k] the registered
// CO output k, numbered in carry-chain order (k = 0 is the output nearest to
// CYINIT). taps_o changes one clock edge after the sampling instant.
//
// Delays: the cumulative delay of tap k is built from pseudo-random steps of
// 0 to 70 ps, 7 in 16 of them zero (carry chains show almost half of their
// bins empty). Inside every CARRY4 the second and third outputs are swapped in
// delay order, which models the look-ahead carry logic that makes some
// consecutive tap delay differences negative; tdc_reorder undoes this. With
// the default 124 cells the line is about 10 ns long, longer than the 8 ns
// clock period it has to cover. All delays are multiplied by
// tdc_pvt_pkg::delay_scale. The chosen delay values are this model's own;
// only the structure follows the original design.
module tdc_carry_chain #(
  parameter int unsigned CARRY4_COUNT = 124,
  parameter int unsigned SEED         = 1
) (
  input  logic                      clk_i,
  input  logic                      sig_i,
  output logic [4*CARRY4_COUNT-1:0] taps_o
);
  localparam int unsigned N    = 4 * CARRY4_COUNT;
  localparam int unsigned HIST = 8;

  real     dly [N];          // nominal cumulative delay of each tap, ps
  real     dly_max;
  realtime t_edge [HIST];    // times of the last input changes, [0] newest
  logic    lvl [HIST];       // input level after each of those changes
  logic    lvl_base;         // input level before the oldest remembered change

  // Tap delays in carry-chain order.
  initial begin
    int unsigned s;
    real step [4];
    real base;
    s = SEED * 32'h9E3779B9 + 32'h1234567;
    base = 0.0;
    for (int unsigned c = 0; c < CARRY4_COUNT; c++) begin
      for (int unsigned j = 0; j < 4; j++) begin
        s = s * 32'd1664525 + 32'd1013904223;
        step[j] = ((s >> 24) % 16 < 7) ? 0.0 : real'((s >> 8) % 71);
      end
      // sorted cumulative delays of this cell: base+step0, +step1, +step2, +step3;
      // outputs 1 and 2 are swapped in the physical numbering.
      dly[4*c + 0] = base + step[0];
      dly[4*c + 2] = dly[4*c + 0] + step[1];
      dly[4*c + 1] = dly[4*c + 2] + step[2];
      dly[4*c + 3] = dly[4*c + 1] + step[3];
      base = dly[4*c + 3];
    end
    dly_max = base;
    $display("tdc_carry_chain (seed %0d): %0d taps, %0.0f ps", SEED, N, dly_max);
    for (int unsigned h = 0; h < HIST; h++) begin
      t_edge[h] = -1.0e9;
      lvl[h]    = 1'b0;
    end
    lvl_base = 1'b0;
    taps_o   = '0;   // slice flip-flops configure to 0
  end

  always @(sig_i) begin
    lvl_base = lvl[HIST-1];
    for (int unsigned h = HIST - 1; h > 0; h--) begin
      t_edge[h] = t_edge[h-1];
      lvl[h]    = lvl[h-1];
    end
    t_edge[0] = $realtime;
    lvl[0]    = sig_i;
  end

  always @(posedge clk_i) begin
    realtime now;
    logic    v;
    now = $realtime;
    if (now - t_edge[0] > dly_max * tdc_pvt_pkg::delay_scale) begin
      taps_o <= {N{lvl[0]}};
    end else begin
      for (int unsigned k = 0; k < N; k++) begin
        v = lvl_base;
        for (int h = HIST - 1; h >= 0; h--)
          if (now - dly[k] * tdc_pvt_pkg::delay_scale >= t_edge[h]) v = lvl[h];
        taps_o[k] <= v;
      end
    end
  end
endmodule
