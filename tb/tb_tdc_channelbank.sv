`timescale 1ps / 1ps
// tb_tdc_channelbank: the channel bank driven directly from the testbench
// (no controller). Checks the coarse counter wrap period and reset, that the
// input-mux select of one channel routes the calibration signal to that
// channel only, the per-channel LUT write enables, the histogram port, the
// frequency counter on both channels' ring oscillators, and that with an
// all-zero LUT the timestamp is the coarse count plus the deskew constant.
module tb_tdc_channelbank;
  localparam int CH = 2, C4 = 124, RAW_W = 9, FP_W = 13, EXHIS_W = 4, CW = 6, FCW = 13, FTW = 10;
  localparam int HIS_W = FP_W + EXHIS_W + 1, TW = CW + FP_W;
  int checks = 0, failures = 0;
  logic clk = 0, rst, cc_rst, cc_cy, calib = 0;
  logic [CH-1:0] sig = '0, det, pol, csel, edet, lwe;
  logic [TW-1:0] deskew [CH];
  logic [RAW_W-1:0] raw [CH], eraw [CH];
  logic [TW-1:0] fp [CH];
  logic [RAW_W:0] ha;
  logic hwe, fsel, fstart, fdone;
  logic [HIS_W-1:0] hd, hq;
  logic [FCW-1:0] fcount;
  logic [RAW_W-1:0] la;
  logic [FP_W-1:0] ld;
  logic [FP_W-1:0] lq [CH];
  int ndet [CH];

  tdc_channelbank #(.CHANNELS(CH), .CARRY4_COUNT(C4), .RAW_W(RAW_W), .FP_W(FP_W), .EXHIS_W(EXHIS_W),
                    .COARSE_W(CW), .FCOUNT_W(FCW), .FTIMER_W(FTW)) dut (
    .clk_i(clk), .rst_i(rst), .cc_rst_i(cc_rst), .cc_cy_o(cc_cy),
    .signal_i(sig), .calib_i(calib), .deskew_i(deskew),
    .detect_o(det), .polarity_o(pol), .raw_o(raw), .fp_o(fp),
    .calib_sel_i(csel), .enc_detect_o(edet), .enc_raw_o(eraw),
    .his_a_i(ha), .his_we_i(hwe), .his_d_i(hd), .his_q_o(hq),
    .fc_sel_i(fsel), .fc_start_i(fstart), .fc_done_o(fdone), .fc_count_o(fcount),
    .lut_a_i(la), .lut_we_i(lwe), .lut_d_i(ld), .lut_q_o(lq));

  always #4000 clk = ~clk;

  initial begin
    #500000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #1;
    for (int c = 0; c < CH; c++) if (det[c]) begin
      ndet[c]++;
      checks++;
      if (fp[c][FP_W-1:0] !== deskew[c][FP_W-1:0]) begin
        failures++; $display("FAIL ch%0d fraction with empty LUT", c);
      end
    end
  end

  initial begin
    int t0, t1, cnt;
    rst = 1; cc_rst = 1; csel = '0; lwe = '0; hwe = 0; fstart = 0; fsel = 0; ha = '0; hd = '0; la = '0; ld = '0;
    deskew[0] = TW'(19'h1_2345); deskew[1] = TW'(19'h0_0F0F);
    ndet[0] = 0; ndet[1] = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0; cc_rst = 0;
    // coarse counter: overflow every 2^CW cycles, and 2^CW cycles after a reset
    cnt = 0;
    while (!cc_cy) begin @(posedge clk); #1; cnt++; end
    checks++;
    if (cnt != 1 << CW) begin failures++; $display("FAIL first wrap after %0d cycles", cnt); end
    repeat (10) @(posedge clk);
    @(negedge clk) cc_rst = 1;
    @(negedge clk) cc_rst = 0;
    cnt = 0;
    @(posedge clk); #1;
    while (!cc_cy) begin @(posedge clk); #1; cnt++; end
    checks++;
    if (cnt != (1 << CW) - 1) begin failures++; $display("FAIL wrap %0d cycles after reset", cnt); end
    // calibration signal routed to channel 1 only
    csel = 2'b10;
    for (int k = 0; k < 20; k++) begin
      repeat (4) @(posedge clk);
      #(100 + $urandom % 7800) calib = ~calib;
    end
    repeat (10) @(posedge clk);
    checks += 2;
    if (ndet[1] != 20) begin failures++; $display("FAIL ch1 saw %0d of 20 calibration edges", ndet[1]); end
    if (ndet[0] != 0)  begin failures++; $display("FAIL ch0 saw calibration edges"); end
    // user signal of channel 0 (channel 1 still on calibration)
    for (int k = 0; k < 10; k++) begin
      repeat (4) @(posedge clk);
      #(100 + $urandom % 7800) sig = ~sig;
    end
    repeat (10) @(posedge clk);
    checks += 2;
    if (ndet[0] != 10) begin failures++; $display("FAIL ch0 saw %0d of 10 edges", ndet[0]); end
    if (ndet[1] != 20) begin failures++; $display("FAIL ch1 saw user edges while on calibration"); end
    // LUT write enables
    @(negedge clk) la = 9'd7; ld = 13'h0ABC; lwe = 2'b01;
    @(negedge clk) ld = 13'h1234; lwe = 2'b10; la = 9'd8;
    @(negedge clk) lwe = 2'b00; la = 9'd7;
    @(negedge clk);
    checks += 2;
    if (lq[0] !== 13'h0ABC) begin failures++; $display("FAIL ch0 LUT write"); end
    if (lq[1] !== 13'h0000) begin failures++; $display("FAIL ch1 LUT written by ch0 enable"); end
    @(negedge clk) la = 9'd8;
    @(negedge clk);
    checks++;
    if (lq[1] !== 13'h1234) begin failures++; $display("FAIL ch1 LUT write"); end
    // histogram port
    @(negedge clk) ha = 10'h2A5; hd = 18'h2_1357; hwe = 1;
    @(negedge clk) hwe = 0;
    @(negedge clk);
    checks++;
    if (hq !== 18'h2_1357) begin failures++; $display("FAIL histogram"); end
    // frequency counter on each channel's oscillator
    for (int c = 0; c < CH; c++) begin
      int e;
      e = (1 << FTW) * 8000 / (2 * (22600 + 97 * c));
      @(negedge clk) fsel = 1'(c); fstart = 1;
      @(negedge clk) fstart = 0;
      while (!fdone) @(negedge clk);
      checks++;
      if (int'(fcount) < e - 1 || int'(fcount) > e + 1) begin
        failures++; $display("FAIL ch%0d frequency %0d exp %0d", c, fcount, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
