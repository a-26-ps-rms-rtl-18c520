`timescale 1ps / 1ps
// tdc_lut: calibration look-up table of a channel.
//
// Converts the raw fine value (index of the last tap reached) into the
// fractional part of the timestamp, in units of 2^-FP_W clock periods. It is a
// simple dual-port memory, as one FPGA block RAM: the datapath reads through
// port (ra_i, rd_o) every cycle, while the controller loads new values and
// reads old ones through port (ca_i, cwe_i, cwd_i, crd_o) without disturbing
// the datapath, which is what lets online calibration run during operation.
// Both reads are registered (one cycle). Contents start at zero until the
// startup calibration has loaded them.
module tdc_lut #(
  parameter int unsigned RAW_W = 9,
  parameter int unsigned FP_W  = 13
) (
  input  logic             clk_i,
  input  logic [RAW_W-1:0] ra_i,
  output logic [FP_W-1:0]  rd_o,
  input  logic [RAW_W-1:0] ca_i,
  input  logic             cwe_i,
  input  logic [FP_W-1:0]  cwd_i,
  output logic [FP_W-1:0]  crd_o
);
  logic [FP_W-1:0] mem [2**RAW_W];

  initial for (int i = 0; i < 2**RAW_W; i++) mem[i] = '0;

  always_ff @(posedge clk_i) rd_o <= mem[ra_i];

  always_ff @(posedge clk_i) begin
    if (cwe_i) mem[ca_i] <= cwd_i;
    crd_o <= mem[ca_i];
  end
endmodule
