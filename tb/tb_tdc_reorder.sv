`timescale 1ps / 1ps
// tb_tdc_reorder: random taps in, checks the permutation and the one-cycle delay.
module tb_tdc_reorder;
  localparam int C4 = 124;
  localparam int N  = 4 * C4;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [N-1:0] taps, line, exp_q;
  int perm [4] = '{0, 2, 1, 3};

  tdc_reorder #(.CARRY4_COUNT(C4)) dut (.clk_i(clk), .taps_i(taps), .line_o(line));

  always #4000 clk = ~clk;

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [N-1:0] ref_sort(logic [N-1:0] t);
    logic [N-1:0] r;
    // position s in arrival order (0 = first) is line bit N-1-s
    for (int s = 0; s < N; s++) r[N-1-s] = t[4*(s/4) + perm[s%4]];
    return r;
  endfunction

  initial begin
    taps = '0;
    @(posedge clk);
    for (int i = 0; i < 200; i++) begin
      for (int w = 0; w < N; w += 32) taps[w +: 32] = $urandom;
      exp_q = ref_sort(taps);
      @(posedge clk);
      #1;
      checks++;
      if (line !== exp_q) begin
        failures++;
        $display("FAIL at vector %0d", i);
      end
    end
    // a thermometer in chain order with taps 1 and 2 of a cell crossed
    taps = '0;
    taps[0] = 1; taps[2] = 1;     // reached 0 and 2, not 1: sorted must be 2 leading ones
    @(posedge clk); #1;
    checks++;
    if (line[N-1 -: 3] !== 3'b110 || line[N-4:0] !== '0) begin
      failures++;
      $display("FAIL thermometer %b", line[N-1 -: 8]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
