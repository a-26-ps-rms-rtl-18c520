`timescale 1ps / 1ps
// tb_tdc: end-to-end test of the TDC core at reduced calibration sizes
// (F = 8, P = 2: 1024 calibration hits per channel; 2^10-cycle frequency
// counter; 12-bit coarse counter), full 124-CARRY4 delay lines, 8 ns clock.
//
// Sequence: reset -> startup calibration -> ready; differential measurement
// (one oscillator reaching channel 0 through 2 ns and channel 1 through
// 4 ns, the difference of the two timestamps must be 2 ns); heating (all
// delays +3 %) -> online calibration must follow: frequencies drop, LUT
// entries grow by f0/f, more entries saturate, and the differential
// measurement still gives 2 ns. Along the way: latency of 6 cycles, edges
// inside the dead time are dropped, coarse counter overflows, debug reads.
// Every mechanism is counted and must have happened at least once.
module tb_tdc;
  localparam int CH = 2, RAW_W = 9, FP_W = 8, EXHIS_W = 2, CW = 12, FCW = 13, FTW = 10;
  localparam int HIS_W = FP_W + EXHIS_W + 1, TW = CW + FP_W;
  localparam real T = 8000.0;
  int checks = 0, failures = 0;
  logic clk = 0, rst, ready, cc_rst, cc_cy;
  logic [CH-1:0] sig = '0, det, pol;
  logic [TW-1:0] deskew [CH];
  logic [RAW_W-1:0] raw [CH];
  logic [TW-1:0] fp [CH];
  logic dbg_req = 0, dbg_ack, dbg_chan = 0;
  logic [RAW_W-1:0] dbg_addr = '0;
  logic [FP_W-1:0] dbg_lut;
  logic [HIS_W-1:0] dbg_his;
  logic [FCW-1:0] dbg_freq [CH], dbg_freq0 [CH];

  // mechanism counters
  int n_ready = 0, n_online = 0, n_sat_grow = 0, n_dead = 0, n_ovf = 0, n_dbg = 0, n_lat = 0;

  tdc #(.CHANNELS(CH), .RAW_W(RAW_W), .FP_W(FP_W), .EXHIS_W(EXHIS_W), .COARSE_W(CW),
        .FCOUNT_W(FCW), .FTIMER_W(FTW)) dut (
    .clk_i(clk), .rst_i(rst), .ready_o(ready), .cc_rst_i(cc_rst), .cc_cy_o(cc_cy),
    .signal_i(sig), .deskew_i(deskew), .detect_o(det), .polarity_o(pol), .raw_o(raw), .fp_o(fp),
    .dbg_req_i(dbg_req), .dbg_chan_i(dbg_chan), .dbg_addr_i(dbg_addr), .dbg_ack_o(dbg_ack),
    .dbg_lut_o(dbg_lut), .dbg_his_o(dbg_his), .dbg_freq_o(dbg_freq), .dbg_freq0_o(dbg_freq0));

  always #4000 clk = ~clk;

  initial begin
    #4000000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ncycle = 0;
  always @(posedge clk) begin
    ncycle <= ncycle + 1;
    if (cc_cy) n_ovf++;
  end

  // per-channel queues of detected timestamps
  logic [TW-1:0] ts_q [CH][$];
  int            tc_q [CH][$];
  always @(posedge clk) begin
    #1;
    for (int c = 0; c < CH; c++) if (det[c]) begin
      ts_q[c].push_back(fp[c] - deskew[c]);
      tc_q[c].push_back(ncycle);
    end
  end

  // debug read of one LUT entry
  task automatic dbg_read(input int c, input int a, output int v);
    @(negedge clk) dbg_req = 1; dbg_chan = 1'(c); dbg_addr = RAW_W'(a);
    @(posedge clk); #1;
    while (!dbg_ack) begin @(posedge clk); #1; end
    @(negedge clk) dbg_req = 0;
    v = int'(dbg_lut);
    n_dbg++;
  endtask

  // differential measurement: n edges, each reaching ch0 after 2 ns, ch1 after 4 ns
  task automatic differential(input int n, input string what);
    real sum, sum2, d, mean, rms;
    int m;
    for (int c = 0; c < CH; c++) begin ts_q[c].delete(); tc_q[c].delete(); end
    fork
      for (int i = 0; i < n; i++) begin
        repeat (4 + $urandom % 3) @(posedge clk);
        #($urandom % 8000);
        fork
          begin #2000 sig[0] = ~sig[0]; end
          begin #4000 sig[1] = ~sig[1]; end
        join
      end
    join
    repeat (12) @(posedge clk);
    checks++;
    if (ts_q[0].size() != n || ts_q[1].size() != n) begin
      failures++; $display("FAIL %s: %0d/%0d timestamps for %0d edges", what, ts_q[0].size(), ts_q[1].size(), n);
    end
    sum = 0; sum2 = 0; m = 0;
    while (ts_q[0].size() > 0 && ts_q[1].size() > 0) begin
      logic [TW-1:0] diff;
      diff = ts_q[1].pop_front() - ts_q[0].pop_front();
      d = real'($signed(diff)) * T / real'(1 << FP_W);
      sum += d; sum2 += d * d; m++;
    end
    mean = sum / m;
    rms = $sqrt(sum2 / m - mean * mean);
    $display("%s: %0d pairs, mean difference %0.1f ps, standard deviation %0.1f ps", what, m, mean, rms);
    checks += 2;
    if (mean < 1900.0 || mean > 2100.0) begin failures++; $display("FAIL %s mean", what); end
    if (rms > 60.0) begin failures++; $display("FAIL %s standard deviation", what); end
  endtask

  int lut_cold [2][16];
  int sat_cold, sat_hot;

  initial begin
    int v, t0, f0c, fhot;
    deskew[0] = TW'(20'h0_1234); deskew[1] = TW'(20'h3_0F0F);
    rst = 1; cc_rst = 1;
    repeat (4) @(posedge clk);
    #1 rst = 0; cc_rst = 0;
    wait (ready);
    n_ready++;
    $display("ready after %0d cycles; f0 = %0d, %0d", ncycle, dbg_freq0[0], dbg_freq0[1]);
    for (int c = 0; c < CH; c++) begin
      checks++;
      if (int'(dbg_freq0[c]) < 170 || int'(dbg_freq0[c]) > 190) begin failures++; $display("FAIL f0 ch%0d", c); end
    end
    // latency: one edge on channel 0 only
    repeat (6) @(posedge clk);
    for (int c = 0; c < CH; c++) begin ts_q[c].delete(); tc_q[c].delete(); end
    #(200 + $urandom % 7600);
    t0 = ncycle;
    sig[0] = ~sig[0];
    repeat (10) @(posedge clk);
    checks++;
    if (tc_q[0].size() != 1 || tc_q[0][0] - t0 != 6) begin
      failures++; $display("FAIL latency");
    end else n_lat++;
    // dead time: two edges one cycle apart, only the first is seen
    for (int c = 0; c < CH; c++) begin ts_q[c].delete(); tc_q[c].delete(); end
    repeat (4) @(posedge clk);
    #3000 sig[0] = ~sig[0];
    #8000 sig[0] = ~sig[0];
    repeat (10) @(posedge clk);
    checks++;
    if (ts_q[0].size() != 1) begin failures++; $display("FAIL dead time (%0d detections)", ts_q[0].size()); end
    else n_dead++;
    // edge after the pair restores the level seen by the encoder
    repeat (4) @(posedge clk);
    differential(1500, "cold");
    // LUT sample and saturation count, cold
    sat_cold = 0;
    for (int c = 0; c < CH; c++)
      for (int a = 0; a < 512; a += 1) begin
        dbg_read(c, a, v);
        if (v == (1 << FP_W) - 1) sat_cold++;
        if (a % 32 == 0) lut_cold[c][a / 32] = v;
      end
    f0c = int'(dbg_freq0[0]);
    // heat up: every delay +3 %
    tdc_pvt_pkg::delay_scale = 1.03;
    wait (int'(dbg_freq[0]) < f0c - 2);
    n_online++;
    wait (int'(dbg_freq[1]) < int'(dbg_freq0[1]) - 2);
    n_online++;
    fhot = int'(dbg_freq[0]);
    $display("hot: f = %0d, %0d", dbg_freq[0], dbg_freq[1]);
    // allow each channel a complete LUT pass with the new frequency
    repeat (4 * (1 << FTW) + 2 * 512 * 40) @(posedge clk);
    sat_hot = 0;
    for (int c = 0; c < CH; c++)
      for (int a = 0; a < 512; a += 1) begin
        dbg_read(c, a, v);
        if (v == (1 << FP_W) - 1) sat_hot++;
        if (a % 32 == 0 && lut_cold[c][a / 32] < (1 << FP_W) - 8 && lut_cold[c][a / 32] > 20) begin
          real e;
          e = real'(lut_cold[c][a / 32]) * real'(dbg_freq0[c]) / real'(dbg_freq[c]);
          checks++;
          if (real'(v) < e - 2.0 || real'(v) > e + 2.0) begin
            failures++; $display("FAIL ch%0d LUT[%0d] hot %0d, expected about %0.1f", c, a, v, e);
          end
        end
      end
    $display("saturated LUT entries: cold %0d, hot %0d", sat_cold, sat_hot);
    checks++;
    if (sat_hot <= sat_cold) begin failures++; $display("FAIL no new saturation"); end
    else n_sat_grow++;
    differential(1500, "hot, online calibrated");
    tdc_pvt_pkg::delay_scale = 1.0;
    // mechanisms
    checks += 7;
    if (n_ready == 0)    begin failures++; $display("FAIL never ready"); end
    if (n_online < 2)    begin failures++; $display("FAIL online calibration not seen"); end
    if (n_sat_grow == 0) begin failures++; $display("FAIL saturation not seen"); end
    if (n_dead == 0)     begin failures++; $display("FAIL dead time not seen"); end
    if (n_ovf == 0)      begin failures++; $display("FAIL coarse overflow not seen"); end
    if (n_dbg == 0)      begin failures++; $display("FAIL no debug read"); end
    if (n_lat == 0)      begin failures++; $display("FAIL latency not checked"); end
    $display("mechanisms: ready %0d, online updates %0d, saturation growth %0d, dead-time drops %0d, overflows %0d, debug reads %0d",
             n_ready, n_online, n_sat_grow, n_dead, n_ovf, n_dbg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
