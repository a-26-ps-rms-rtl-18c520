`timescale 1ps / 1ps
// tdc_reorder: second sampling row and tap reordering of the delay line.
//
// The carry chain's look-ahead logic makes some later outputs switch before
// earlier ones, so the taps do not arrive in their physical order. This block
// registers the first-row samples a second time (the second flip-flop row of
// the delay line drawing, which also settles metastable first-row samples)
// and permutes the bits so that the signal reaches them strictly in order.
//
// Interface: taps_i[k] is physical output k of the carry chain (k = 0 next to
// the injection point). PERM[j] is the physical output, within each CARRY4,
// that is reached j-th; the default {0,2,1,3} matches tdc_carry_chain. The
// output follows the numbering of the delay-line drawing: line_o[N-1] is the
// tap reached first, line_o[0] the tap reached last. One cycle of latency.
// Reordering follows the original design; the permutation itself is set by the
// timing of the actual chain and is a parameter here.
module tdc_reorder #(
  parameter int unsigned CARRY4_COUNT = 124,
  parameter int unsigned PERM [4]     = '{0, 2, 1, 3}
) (
  input  logic                      clk_i,
  input  logic [4*CARRY4_COUNT-1:0] taps_i,
  output logic [4*CARRY4_COUNT-1:0] line_o
);
  localparam int unsigned N = 4 * CARRY4_COUNT;

  logic [N-1:0] sorted;

  always_comb begin
    for (int unsigned c = 0; c < CARRY4_COUNT; c++)
      for (int unsigned j = 0; j < 4; j++)
        sorted[N - 1 - (4*c + j)] = taps_i[4*c + PERM[j]];
  end

  always_ff @(posedge clk_i) line_o <= sorted;
endmodule
