`timescale 1ps / 1ps
// tdc_divider: sequential unsigned divider used by the calibration controller.
//
// Restoring division, one quotient bit per clock cycle: start_i loads the
// operands, done_o pulses DW+1 cycles later with quotient_o = dividend_i /
// divisor_i (rounded down). A zero divisor gives an all-ones quotient, which
// the controller then saturates like any other overflow.
//
// The original design gives only the scaling R = f0 / f * R0; carrying out
// the division bit-serially is this design's choice. It keeps the shared
// controller small, and a LUT pass has no deadline that would need more speed.
module tdc_divider #(
  parameter int unsigned DW = 31,   // dividend and quotient width
  parameter int unsigned VW = 17    // divisor width
) (
  input  logic          clk_i,
  input  logic          rst_i,
  input  logic          start_i,
  input  logic [DW-1:0] dividend_i,
  input  logic [VW-1:0] divisor_i,
  output logic          done_o,
  output logic [DW-1:0] quotient_o
);
  localparam int unsigned IW = $clog2(DW + 1);

  logic          busy_q;
  logic [IW-1:0] iter_q;
  logic [DW-1:0] num_q;
  logic [VW-1:0] rem_q;
  logic [VW-1:0] div_q;

  always_ff @(posedge clk_i) begin
    logic [VW:0] trial;
    done_o <= 1'b0;
    if (rst_i) begin
      busy_q <= 1'b0;
      iter_q <= '0;
    end else if (start_i) begin
      busy_q <= 1'b1;
      iter_q <= IW'(DW);
      num_q  <= dividend_i;
      rem_q  <= '0;
      div_q  <= divisor_i;
    end else if (busy_q) begin
      trial = {rem_q, num_q[DW-1]};
      if (trial >= {1'b0, div_q}) begin
        rem_q <= VW'(trial - {1'b0, div_q});
        num_q <= {num_q[DW-2:0], 1'b1};
      end else begin
        rem_q <= VW'(trial);
        num_q <= {num_q[DW-2:0], 1'b0};
      end
      iter_q <= iter_q - 1'b1;
      if (iter_q == IW'(1)) begin
        busy_q <= 1'b0;
        done_o <= 1'b1;
      end
    end
  end

  // After DW steps the dividend register has been replaced by the quotient.
  assign quotient_o = num_q;
endmodule
