`timescale 1ps / 1ps
// tb_tdc_controller: the controller against behavioural models of the
// channels, histogram memory, LUTs and frequency counter (small sizes:
// 16 raw values, F = 6, P = 2, so C = 256 hits per channel).
// Checks: exactly C hits booked per channel, ready only after both channels,
// the startup LUT equal to min(floor(S(n)/2^P), 2^F-1), the reference
// frequencies, then, after the oscillator frequencies change, the online LUT
// equal to min(floor(S(n)*f0/(f*2^P)), 2^F-1) with saturation occurring, and
// a debug read-back.
module tb_tdc_controller;
  localparam int CH = 2, RAW_W = 4, FP_W = 6, EXHIS_W = 2, FCW = 13;
  localparam int HIS_W = FP_W + EXHIS_W + 1, NR = 1 << RAW_W, C = 1 << (FP_W + EXHIS_W);
  localparam int MAXV = (1 << FP_W) - 1;
  int checks = 0, failures = 0;
  logic clk = 0, rst;
  logic ready;
  logic [CH-1:0] sel, det, lut_we;
  logic [RAW_W-1:0] raw [CH];
  logic [RAW_W:0] his_a;
  logic his_we;
  logic [HIS_W-1:0] his_d, his_q;
  logic fc_sel, fc_start, fc_done;
  logic [FCW-1:0] fc_count;
  logic [RAW_W-1:0] lut_a;
  logic [FP_W-1:0] lut_d;
  logic [FP_W-1:0] lut_q [CH];
  logic dbg_req, dbg_ack;
  logic dbg_chan;
  logic [RAW_W-1:0] dbg_addr;
  logic [FP_W-1:0] dbg_lut;
  logic [HIS_W-1:0] dbg_his;
  logic [FCW-1:0] dbg_freq [CH], dbg_freq0 [CH];

  // models
  logic [HIS_W-1:0] hmem [2*NR];
  logic [FP_W-1:0]  lmem [CH][NR];
  int sent [CH][NR];
  int nsent [CH];
  int fmodel [CH];

  tdc_controller #(.CHANNELS(CH), .RAW_W(RAW_W), .FP_W(FP_W), .EXHIS_W(EXHIS_W), .FCOUNT_W(FCW)) dut (
    .clk_i(clk), .rst_i(rst), .ready_o(ready),
    .calib_sel_o(sel), .detect_i(det), .raw_i(raw),
    .his_a_o(his_a), .his_we_o(his_we), .his_d_o(his_d), .his_q_i(his_q),
    .fc_sel_o(fc_sel), .fc_start_o(fc_start), .fc_done_i(fc_done), .fc_count_i(fc_count),
    .lut_a_o(lut_a), .lut_we_o(lut_we), .lut_d_o(lut_d), .lut_q_i(lut_q),
    .dbg_req_i(dbg_req), .dbg_chan_i(dbg_chan), .dbg_addr_i(dbg_addr), .dbg_ack_o(dbg_ack),
    .dbg_lut_o(dbg_lut), .dbg_his_o(dbg_his), .dbg_freq_o(dbg_freq), .dbg_freq0_o(dbg_freq0));

  always #4000 clk = ~clk;

  initial begin
    #2000000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // histogram memory and LUT models: registered reads
  always @(posedge clk) begin
    if (his_we) hmem[his_a] <= his_d;
    his_q <= hmem[his_a];
    for (int c = 0; c < CH; c++) begin
      if (lut_we[c]) lmem[c][lut_a] <= lut_d;
      lut_q[c] <= lmem[c][lut_a];
    end
  end

  // frequency counter model: done 40 cycles after start
  initial begin
    fc_done = 0; fc_count = 0;
    forever begin
      @(posedge clk);
      if (fc_start) begin
        int s;
        s = fc_sel;
        repeat (40) @(posedge clk);
        #1 fc_done = 1; fc_count = FCW'(fmodel[s]);
        @(posedge clk) #1 fc_done = 0;
      end
    end
  end

  // channel models: while selected (and settled), a hit every 3 cycles,
  // raw value drawn from a skewed distribution with some empty bins
  for (genvar c = 0; c < CH; c++) begin : g_hit
    initial begin
      int run;
      det[c] = 0; raw[c] = 0; run = 0;
      forever begin
        @(posedge clk); #1;
        det[c] = 0;
        run = sel[c] ? run + 1 : 0;
        if (run > 20 && run % 3 == 0) begin
          int r;
          do r = int'($urandom % NR); while (r % 5 == 3 || (c == 1 && r == 0));
          if ($urandom % 2 == 0 && r > 8) r = r - 8;
          det[c] = 1; raw[c] = RAW_W'(r);
          sent[c][r]++; nsent[c]++;
        end
      end
    end
  end

  function automatic int expect_lut(int c, int n, int f0, int f);
    longint s;
    s = 0;
    for (int i = n; i < NR; i++) s += sent[c][i];
    s = (s * f0) / (longint'(f) << EXHIS_W);
    return (s > MAXV) ? MAXV : int'(s);
  endfunction

  task automatic check_luts(input string what, output int nsat);
    nsat = 0;
    for (int c = 0; c < CH; c++)
      for (int n = 0; n < NR; n++) begin
        int e;
        e = expect_lut(c, n, fmodel_f0[c], fmodel[c]);
        checks++;
        if (int'(lmem[c][n]) != e) begin
          failures++; $display("FAIL %s ch%0d LUT[%0d]=%0d exp %0d", what, c, n, lmem[c][n], e);
        end
        if (e == MAXV) nsat++;
      end
  endtask

  int fmodel_f0 [CH];

  initial begin
    int nsat;
    for (int i = 0; i < 2*NR; i++) hmem[i] = HIS_W'($urandom);   // garbage before clearing
    for (int c = 0; c < CH; c++) begin
      nsent[c] = 0;
      for (int n = 0; n < NR; n++) begin sent[c][n] = 0; lmem[c][n] = '0; end
    end
    fmodel[0] = 2894; fmodel[1] = 2935;
    fmodel_f0 = fmodel;
    dbg_req = 0; dbg_chan = 0; dbg_addr = 0;
    rst = 1;
    repeat (4) @(posedge clk);
    #1 rst = 0;
    // channel 0 finishes before channel 1 starts; ready must wait for both
    wait (sel[1]);
    checks++;
    if (ready) begin failures++; $display("FAIL ready during calibration"); end
    checks++;
    if (nsent[0] != C) begin failures++; $display("FAIL ch0 sent %0d hits, C=%0d", nsent[0], C); end
    wait (ready);
    checks++;
    if (nsent[1] != C) begin failures++; $display("FAIL ch1 sent %0d hits, C=%0d", nsent[1], C); end
    for (int c = 0; c < CH; c++) begin
      checks++;
      if (int'(dbg_freq0[c]) != fmodel[c]) begin failures++; $display("FAIL f0 ch%0d", c); end
    end
    check_luts("startup", nsat);
    $display("startup: %0d saturated entries", nsat);
    // temperature rises: oscillators slow down by 3 %
    fmodel[0] = fmodel_f0[0] * 97 / 100;
    fmodel[1] = fmodel_f0[1] * 97 / 100;
    for (int c = 0; c < CH; c++) wait (int'(dbg_freq[c]) == fmodel[c]);
    // let both channels complete a pass with the new frequency
    repeat (4 * (NR * 40 + 100)) @(posedge clk);
    check_luts("online", nsat);
    checks++;
    if (nsat < 2) begin failures++; $display("FAIL no saturation seen online (%0d)", nsat); end
    $display("online: %0d saturated entries", nsat);
    // debug read
    for (int k = 0; k < 6; k++) begin
      int ec, ea, eh;
      ec = k % 2; ea = int'($urandom % NR);
      @(negedge clk) dbg_req = 1; dbg_chan = 1'(ec); dbg_addr = RAW_W'(ea);
      @(posedge clk); #1;
      while (!dbg_ack) begin @(posedge clk); #1; end
      @(negedge clk) dbg_req = 0;
      checks += 2;
      if (dbg_lut !== lmem[ec][ea]) begin failures++; $display("FAIL dbg lut"); end
      if (int'(dbg_his) != sent[ec][ea]) begin failures++; $display("FAIL dbg his %0d exp %0d", dbg_his, sent[ec][ea]); end
      repeat (2 * NR * 40) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
