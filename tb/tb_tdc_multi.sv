`timescale 1ps / 1ps
// tb_tdc_multi: the core with three channels, a count that is not a power of
// two, to check that the shared controller, histogram memory and frequency
// counter serve every channel. The delay lines are full length (124 CARRY4);
// the calibration is reduced (F = 8, P = 2, so 1024 hits per channel, and a
// 2^10-cycle frequency counter) to keep the run short.
//
// Checks, after the startup calibration:
//   * each channel's reference oscillator count is within 2 of
//     2^10 * 8000 / (2 * (22600 + 97 c)), the model's half periods;
//   * through the debug port: each channel's histogram holds exactly
//     2^(F+P) hits, none beyond the 496 taps, and its LUT falls monotonically
//     from its top value at raw 0 to 0 at raw 511, matching the running sum
//     of the read-back histogram;
//   * one source reaches channel c through 0.5 + 1.0 c ns: the timestamp
//     differences to channel 0 average c ns within 100 ps, with a standard
//     deviation below 80 ps.
module tb_tdc_multi;
  localparam int CH = 3, RAW_W = 9, FP_W = 8, EXHIS_W = 2, HIS_W = FP_W + EXHIS_W + 1;
  localparam int CW = 12, FCW = 10, FTW = 10, TW = CW + FP_W, NA = 1 << RAW_W;
  localparam real PS = 8000.0 / 256.0;
  int checks = 0, failures = 0;
  logic clk = 0, rst, ready, cc_cy;
  logic [CH-1:0] sig = '0, det, pol;
  logic [TW-1:0] deskew [CH];
  logic [RAW_W-1:0] raw [CH];
  logic [TW-1:0] fp [CH];
  logic dbg_req = 0, dbg_ack;
  logic [1:0] dbg_chan = '0;
  logic [RAW_W-1:0] dbg_addr = '0;
  logic [FP_W-1:0] dbg_lut;
  logic [HIS_W-1:0] dbg_his;
  logic [FCW-1:0] dbg_freq [CH], dbg_freq0 [CH];

  tdc #(.CHANNELS(CH), .RAW_W(RAW_W), .FP_W(FP_W), .EXHIS_W(EXHIS_W), .COARSE_W(CW),
        .FCOUNT_W(FCW), .FTIMER_W(FTW)) dut (
    .clk_i(clk), .rst_i(rst), .ready_o(ready), .cc_rst_i(rst), .cc_cy_o(cc_cy),
    .signal_i(sig), .deskew_i(deskew), .detect_o(det), .polarity_o(pol), .raw_o(raw), .fp_o(fp),
    .dbg_req_i(dbg_req), .dbg_chan_i(dbg_chan), .dbg_addr_i(dbg_addr), .dbg_ack_o(dbg_ack),
    .dbg_lut_o(dbg_lut), .dbg_his_o(dbg_his), .dbg_freq_o(dbg_freq), .dbg_freq0_o(dbg_freq0));

  always #4000 clk = ~clk;

  initial begin
    #20000000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [TW-1:0] ts_q [CH][$];
  always @(posedge clk) begin
    #1;
    for (int c = 0; c < CH; c++) if (det[c] && ready) ts_q[c].push_back(fp[c]);
  end

  initial begin
    int lut [NA], his [NA];
    for (int c = 0; c < CH; c++) deskew[c] = '0;
    rst = 1;
    repeat (4) @(posedge clk);
    @(negedge clk) rst = 0;
    wait (ready);
    $display("ready at %0t; f0 = %0d, %0d, %0d", $time, dbg_freq0[0], dbg_freq0[1], dbg_freq0[2]);
    for (int c = 0; c < CH; c++) begin
      real ef;
      ef = real'(1 << FTW) * 8000.0 / (2.0 * real'(22600 + 97 * c));
      checks++;
      if (real'(dbg_freq0[c]) < ef - 2.0 || real'(dbg_freq0[c]) > ef + 2.0) begin
        failures++; $display("FAIL channel %0d f0 %0d, expected %0.1f", c, dbg_freq0[c], ef);
      end
    end
    // debug read-back of every channel's histogram and LUT
    for (int c = 0; c < CH; c++) begin
      longint sum, tot;
      int bad_lut;
      for (int a = 0; a < NA; a++) begin
        @(negedge clk) dbg_req = 1; dbg_chan = 2'(c); dbg_addr = RAW_W'(a);
        @(posedge clk); #1;
        while (!dbg_ack) begin @(posedge clk); #1; end
        @(negedge clk) dbg_req = 0;
        lut[a] = int'(dbg_lut); his[a] = int'(dbg_his);
      end
      tot = 0;
      for (int a = 0; a < NA; a++) tot += his[a];
      checks++;
      if (tot != (1 << (FP_W + EXHIS_W))) begin failures++; $display("FAIL channel %0d histogram holds %0d hits", c, tot); end
      checks++;
      begin
        int beyond;
        beyond = 0;
        for (int a = 496; a < NA; a++) beyond += his[a];
        if (beyond != 0) begin failures++; $display("FAIL channel %0d has %0d hits beyond the line", c, beyond); end
      end
      // expected LUT from the read-back histogram; f = f0 only right after
      // startup, so allow one unit for an online pass with f != f0
      bad_lut = 0;
      sum = 0;
      for (int a = NA - 1; a >= 0; a--) begin
        longint e;
        sum += his[a];
        e = sum * longint'(dbg_freq0[c]) / (longint'(dbg_freq[c]) << EXHIS_W);
        if (e > 255) e = 255;
        if (lut[a] > e + 1 || lut[a] + 1 < e) bad_lut++;
        if (a < NA - 1 && lut[a] < lut[a+1]) bad_lut++;
      end
      checks++;
      if (bad_lut != 0 || lut[NA-1] != 0 || lut[0] < 250) begin
        failures++; $display("FAIL channel %0d LUT: %0d bad entries, LUT[0] %0d, LUT[511] %0d", c, bad_lut, lut[0], lut[NA-1]);
      end
      $display("channel %0d: %0d hits, LUT[0] = %0d, LUT[255] = %0d", c, tot, lut[0], lut[255]);
    end
    // one source, three path delays
    for (int c = 0; c < CH; c++) ts_q[c].delete();
    for (int i = 0; i < 600; i++) begin
      repeat (4 + $urandom % 3) @(posedge clk);
      #($urandom % 8000);
      fork
        begin #500  sig[0] = ~sig[0]; end
        begin #1500 sig[1] = ~sig[1]; end
        begin #2500 sig[2] = ~sig[2]; end
      join
    end
    repeat (12) @(posedge clk);
    checks++;
    if (ts_q[0].size() != 600 || ts_q[1].size() != 600 || ts_q[2].size() != 600) begin
      failures++; $display("FAIL timestamp counts %0d %0d %0d", ts_q[0].size(), ts_q[1].size(), ts_q[2].size());
    end
    for (int c = 1; c < CH; c++) begin
      real s, s2, m, sd;
      s = 0; s2 = 0;
      for (int i = 0; i < 600; i++) begin
        real d;
        d = real'($signed(ts_q[c][i] - ts_q[0][i])) * PS;
        s += d; s2 += d * d;
      end
      m = s / 600.0;
      sd = $sqrt(s2 / 600.0 - m * m);
      $display("channel %0d - channel 0: mean %0.1f ps, standard deviation %0.1f ps", c, m, sd);
      checks += 2;
      if (m < 1000.0 * c - 100.0 || m > 1000.0 * c + 100.0) begin failures++; $display("FAIL mean"); end
      if (sd > 80.0) begin failures++; $display("FAIL standard deviation"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
