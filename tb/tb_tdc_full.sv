`timescale 1ps / 1ps
// tb_tdc_full: the TDC core at its default sizes (2 channels, 124 CARRY4 per
// delay line, F = 13, P = 4, so 131072 calibration hits per channel, 2^14-cycle
// frequency counter), 8 ns system clock, running the experiments of the
// original evaluation on the behavioural delay-line and oscillator models.
// Temperature is emulated by scaling every delay: 1.3 % over 15 degrees C.
//
//  1. startup calibration at 37 C, LUTs read back;
//  2. a second startup calibration at the same temperature, LUT difference
//     (must stay below 50 ps anywhere);
//  3. differential measurement: one source reaching channel 0 through 2 ns
//     and channel 1 through 4 ns; mean difference 2 ns +-100 ps, standard
//     deviation below 60 ps;
//  4. heating to 47.875 C: ring oscillator frequencies must drop; after online
//     calibration the LUTs are read back; then a startup calibration at
//     47.875 C; the online-corrected LUTs must be closer to it than the
//     37 C LUTs are (mean absolute difference).
module tb_tdc_full;
  localparam int CH = 2, RAW_W = 9, FP_W = 13, HIS_W = 18, CW = 25, FCW = 13, TW = CW + FP_W;
  localparam int NR = 496;
  localparam real T = 8000.0;
  localparam real PS = T / 8192.0;   // ps per LUT unit
  int checks = 0, failures = 0;
  logic clk = 0, rst, ready, cc_cy;
  logic [CH-1:0] sig = '0, det, pol;
  logic [TW-1:0] deskew [CH];
  logic [RAW_W-1:0] raw [CH];
  logic [TW-1:0] fp [CH];
  logic dbg_req = 0, dbg_ack, dbg_chan = 0;
  logic [RAW_W-1:0] dbg_addr = '0;
  logic [FP_W-1:0] dbg_lut;
  logic [HIS_W-1:0] dbg_his;
  logic [FCW-1:0] dbg_freq [CH], dbg_freq0 [CH];

  tdc dut (
    .clk_i(clk), .rst_i(rst), .ready_o(ready), .cc_rst_i(rst), .cc_cy_o(cc_cy),
    .signal_i(sig), .deskew_i(deskew), .detect_o(det), .polarity_o(pol), .raw_o(raw), .fp_o(fp),
    .dbg_req_i(dbg_req), .dbg_chan_i(dbg_chan), .dbg_addr_i(dbg_addr), .dbg_ack_o(dbg_ack),
    .dbg_lut_o(dbg_lut), .dbg_his_o(dbg_his), .dbg_freq_o(dbg_freq), .dbg_freq0_o(dbg_freq0));

  always #4000 clk = ~clk;

  initial begin
    #200000000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [TW-1:0] ts_q [CH][$];
  always @(posedge clk) begin
    #1;
    for (int c = 0; c < CH; c++) if (det[c]) ts_q[c].push_back(fp[c] - deskew[c]);
  end

  int lut_a [CH][NR], lut_b [CH][NR], lut_c [CH][NR], lut_d [CH][NR];

  task automatic read_luts(output int l [CH][NR]);
    for (int c = 0; c < CH; c++)
      for (int a = 0; a < NR; a++) begin
        @(negedge clk) dbg_req = 1; dbg_chan = 1'(c); dbg_addr = RAW_W'(a);
        @(posedge clk); #1;
        while (!dbg_ack) begin @(posedge clk); #1; end
        @(negedge clk) dbg_req = 0;
        l[c][a] = int'(dbg_lut);
      end
  endtask

  task automatic calibrate(input string what);
    @(negedge clk) rst = 1;
    repeat (4) @(posedge clk);
    @(negedge clk) rst = 0;
    @(posedge clk);
    wait (ready);
    $display("%s: startup calibration done at %0t, f0 = %0d, %0d", what, $time, dbg_freq0[0], dbg_freq0[1]);
  endtask

  function automatic real lut_diff(input int x [CH][NR], input int y [CH][NR], input bit want_max);
    real m, s;
    m = 0; s = 0;
    for (int c = 0; c < CH; c++)
      for (int a = 0; a < NR; a++) begin
        real d;
        d = real'(x[c][a] - y[c][a]) * PS;
        if (d < 0) d = -d;
        if (d > m) m = d;
        s += d;
      end
    return want_max ? m : s / (CH * NR);
  endfunction

  task automatic differential(input int n);
    real sum, sum2, d, mean, rms;
    int m;
    for (int c = 0; c < CH; c++) ts_q[c].delete();
    for (int i = 0; i < n; i++) begin
      repeat (4 + $urandom % 3) @(posedge clk);
      #($urandom % 8000);
      fork
        begin #2000 sig[0] = ~sig[0]; end
        begin #4000 sig[1] = ~sig[1]; end
      join
    end
    repeat (12) @(posedge clk);
    checks++;
    if (ts_q[0].size() != n || ts_q[1].size() != n) begin
      failures++; $display("FAIL %0d/%0d timestamps for %0d edges", ts_q[0].size(), ts_q[1].size(), n);
    end
    sum = 0; sum2 = 0; m = 0;
    while (ts_q[0].size() > 0 && ts_q[1].size() > 0) begin
      logic [TW-1:0] diff;
      diff = ts_q[1].pop_front() - ts_q[0].pop_front();
      d = real'($signed(diff)) * PS;
      sum += d; sum2 += d * d; m++;
    end
    mean = sum / m;
    rms = $sqrt(sum2 / m - mean * mean);
    $display("differential measurement: %0d pairs, mean %0.1f ps, standard deviation %0.1f ps (%0.1f ps per channel)",
             m, mean, rms, rms / $sqrt(2.0));
    checks += 2;
    if (mean < 1900.0 || mean > 2100.0) begin failures++; $display("FAIL mean difference"); end
    if (rms > 60.0) begin failures++; $display("FAIL standard deviation"); end
  endtask

  initial begin
    int fcold [CH];
    real hot_scale, d_same, d_cold_hot, d_online_hot;
    deskew[0] = '0; deskew[1] = '0;
    rst = 1;
    // 1, 2: two startup calibrations at 37 C
    calibrate("37 C, first");
    read_luts(lut_a);
    calibrate("37 C, second");
    read_luts(lut_b);
    fcold[0] = int'(dbg_freq0[0]); fcold[1] = int'(dbg_freq0[1]);
    d_same = lut_diff(lut_a, lut_b, 1);
    $display("two startup calibrations at 37 C: LUTs differ by at most %0.1f ps", d_same);
    checks++;
    if (d_same > 50.0) begin failures++; $display("FAIL startup calibration not repeatable"); end
    // 3: differential measurement
    differential(2000);
    // 4: heat to 47.875 C
    hot_scale = 1.0 + 0.013 * (47.875 - 37.0) / 15.0;
    tdc_pvt_pkg::delay_scale = hot_scale;
    // two online passes per channel: frequency measurement and LUT rewrite
    wait (int'(dbg_freq[0]) < fcold[0] && int'(dbg_freq[1]) < fcold[1]);
    repeat (2 * ((1 << 14) + 512 * 40)) @(posedge clk);
    $display("47.875 C: f = %0d, %0d (f0 = %0d, %0d)", dbg_freq[0], dbg_freq[1], dbg_freq0[0], dbg_freq0[1]);
    for (int c = 0; c < CH; c++) begin
      checks++;
      if (!(int'(dbg_freq[c]) < fcold[c])) begin failures++; $display("FAIL frequency did not drop"); end
    end
    read_luts(lut_c);
    calibrate("47.875 C");
    read_luts(lut_d);
    d_cold_hot   = lut_diff(lut_b, lut_d, 0);
    d_online_hot = lut_diff(lut_c, lut_d, 0);
    $display("vs. startup calibration at 47.875 C, mean |difference|: 37 C LUT %0.2f ps (max %0.1f), online-corrected LUT %0.2f ps (max %0.1f)",
             d_cold_hot, lut_diff(lut_b, lut_d, 1), d_online_hot, lut_diff(lut_c, lut_d, 1));
    checks++;
    if (!(d_online_hot < d_cold_hot)) begin failures++; $display("FAIL online calibration did not help"); end
    tdc_pvt_pkg::delay_scale = 1.0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
