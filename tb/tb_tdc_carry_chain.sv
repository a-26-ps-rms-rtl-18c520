`timescale 1ps / 1ps
// tb_tdc_carry_chain: injects single rising edges at a swept distance d before
// a sampling clock edge and checks that the samples, sorted in arrival order
// (CARRY4 outputs 0,2,1,3), form a thermometer whose length never decreases
// with d; that the unsorted chain order is not a thermometer (look-ahead
// effect); that the line is longer than an 8 ns clock period and fully
// traversed after 12 ns; and that a larger delay scale shortens the reach.
module tb_tdc_carry_chain;
  localparam int C4 = 124, N = 4 * C4;
  int checks = 0, failures = 0, n_unsorted = 0;
  logic clk = 0, sig = 0;
  logic [N-1:0] taps;
  int perm [4] = '{0, 2, 1, 3};

  tdc_carry_chain #(.CARRY4_COUNT(C4)) dut (.clk_i(clk), .sig_i(sig), .taps_o(taps));

  initial begin
    #1000000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one measurement: rising edge d ps before the clock edge; returns sorted reach
  task automatic shot(input int d, output int reach, output bit thermo, output bit phys_thermo);
    logic [N-1:0] s;
    sig = 0; #20000;
    sig = 1; #(d);
    clk = 1; #1;
    for (int i = 0; i < N; i++) s[i] = taps[4*(i/4) + perm[i%4]];
    reach = 0;
    while (reach < N && s[reach]) reach++;
    thermo = 1;
    for (int i = reach; i < N; i++) if (s[i]) thermo = 0;
    phys_thermo = 1;
    for (int i = 1; i < N; i++) if (taps[i] && !taps[i-1]) phys_thermo = 0;
    #1000; clk = 0; #1000;
  endtask

  initial begin
    int r, prev;
    bit t, pt;
    prev = 0;
    for (int d = 0; d <= 12000; d += 13) begin
      shot(d, r, t, pt);
      checks += 2;
      if (!t) begin failures++; $display("FAIL d=%0d sorted taps not a thermometer", d); end
      if (r < prev) begin failures++; $display("FAIL d=%0d reach %0d < %0d", d, r, prev); end
      if (!pt) n_unsorted++;
      prev = r;
    end
    shot(8000, r, t, pt);
    checks++;
    if (r >= N) begin failures++; $display("FAIL line shorter than 8 ns"); end
    shot(12000, r, t, pt);
    checks++;
    if (r != N) begin failures++; $display("FAIL line not traversed after 12 ns (%0d)", r); end
    checks++;
    if (n_unsorted == 0) begin failures++; $display("FAIL chain order never out of order"); end
    shot(5000, prev, t, pt);
    tdc_pvt_pkg::delay_scale = 1.1;
    shot(5000, r, t, pt);
    tdc_pvt_pkg::delay_scale = 1.0;
    checks++;
    if (!(r < prev)) begin failures++; $display("FAIL reach %0d at scale 1.1 vs %0d", r, prev); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
