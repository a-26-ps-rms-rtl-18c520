`timescale 1ps / 1ps
// tdc_histogram: histogram memory of the startup calibration.
//
// Holds H(n), the number of calibration hits at raw value n, for every
// channel: address {channel, n}. Bins are HIS_W = F+P+1 bits wide so that
// a bin can hold the whole sample count C = 2^(F+P). Single port with a
// registered read; the controller does the read-modify-write of each hit.
// Keeping one histogram per channel (rather than one shared by all) is this
// design's choice: online calibration recomputes the startup delays R0(n)
// from it.
module tdc_histogram #(
  parameter int unsigned AW    = 10,
  parameter int unsigned HIS_W = 18
) (
  input  logic             clk_i,
  input  logic [AW-1:0]    a_i,
  input  logic             we_i,
  input  logic [HIS_W-1:0] d_i,
  output logic [HIS_W-1:0] q_o
);
  logic [HIS_W-1:0] mem [2**AW];

  initial for (int i = 0; i < 2**AW; i++) mem[i] = '0;

  always_ff @(posedge clk_i) begin
    if (we_i) mem[a_i] <= d_i;
    q_o <= mem[a_i];
  end
endmodule
