`timescale 1ps / 1ps
// tb_tdc_channel: one full-size channel (124 CARRY4, 8 ns clock).
// Phase 1: edges at random phases, with the testbench building its own code
// density histogram of raw_o and loading LUT[n] = min(floor(2^F * S(n) / S),
// 2^F-1) through the load port. Phase 2: edges at known times; every
// timestamp is compared with the true time (coarse count of the testbench's
// clock plus phase, plus the deskew constant), its error must stay within
// 150 ps, their standard deviation within 40 ps and their mean within 60 ps
// (the LUT gives the far end of each bin, so the errors carry a bias of about
// half a bin; the deskew constant absorbs such an offset); the latency (6 clock edges from the edge to
// detect_o) and the polarity of every edge are checked too.
module tb_tdc_channel;
  localparam int C4 = 124, N = 4 * C4, RAW_W = 9, FP_W = 13, CW = 25, TW = CW + FP_W;
  localparam real T = 8000.0;
  localparam int NCAL = 20000, NMEAS = 3000;
  int checks = 0, failures = 0;
  logic clk = 0, rst, sig = 0;
  logic [CW-1:0] coarse = 0;
  logic [TW-1:0] deskew;
  logic det, pol, edet, ro, lwe;
  logic [RAW_W-1:0] raw, eraw, la;
  logic [TW-1:0] fp;
  logic [FP_W-1:0] ld, lq;
  int hist [N];
  realtime t_first;
  realtime te_q [$];
  logic    pol_q [$];
  int      lat_q [$];
  int ncycle = 0;
  bit measuring = 0;
  real err_sum2 = 0.0, err_max = 0.0, err_sum = 0.0;
  int nmeas = 0;

  tdc_channel #(.CARRY4_COUNT(C4), .RAW_W(RAW_W), .FP_W(FP_W), .COARSE_W(CW)) dut (
    .clk_i(clk), .rst_i(rst), .signal_i(sig), .calib_i(1'b0), .sel_i(1'b0),
    .coarse_i(coarse), .deskew_i(deskew),
    .detect_o(det), .polarity_o(pol), .raw_o(raw), .fp_o(fp),
    .enc_detect_o(edet), .enc_raw_o(eraw), .ro_clk_o(ro),
    .lut_a_i(la), .lut_we_i(lwe), .lut_d_i(ld), .lut_q_o(lq));

  always #4000 clk = ~clk;

  // coarse time driven by the testbench: count of posedges since the first
  always @(posedge clk) begin
    if (ncycle == 0) t_first = $realtime;
    ncycle <= ncycle + 1;
    coarse <= coarse + 1'b1;
  end

  initial begin
    #3000000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  always @(posedge clk) begin
    #1;
    if (det) begin
      if (!measuring) begin
        hist[raw]++;
      end else if (te_q.size() == 0) begin
        checks++; failures++; $display("FAIL unexpected detection");
      end else begin
        realtime te;
        real exp_fp, err;
        logic [TW-1:0] d;
        te = te_q.pop_front();
        // time of the posedge where coarse changed to 0 is t_first; coarse
        // after posedge j (j = 0 first) is j+1, so tick value v is at t_first + (v-1)*T
        exp_fp = ((te - (t_first - T)) / T) * 8192.0;
        d = fp - deskew - TW'(longint'(exp_fp));
        err = real'($signed(d)) * T / 8192.0;
        nmeas++;
        err_sum2 += err * err;
        err_sum += err;
        if (err > err_max) err_max = err;
        if (-err > err_max) err_max = -err;
        checks += 3;
        if (err > 150.0 || err < -150.0) begin
          failures++; $display("FAIL timestamp error %0.1f ps (raw %0d)", err, raw);
        end
        if (pol !== pol_q.pop_front()) begin failures++; $display("FAIL polarity"); end
        if (ncycle - lat_q.pop_front() != 6) begin
          failures++; $display("FAIL latency %0d", ncycle - lat_q[0]);
        end
      end
    end
  end

  task automatic shoot(input bit record);
    int ofs;
    repeat (4 + $urandom % 3) @(posedge clk);
    ofs = record ? 100 + int'($urandom % 7800) : int'($urandom % 8000);
    #(ofs);
    sig = ~sig;
    if (record) begin
      te_q.push_back($realtime);
      pol_q.push_back(sig);
      lat_q.push_back(ncycle);   // posedges counted after this edge
    end
  endtask

  initial begin
    longint s, tot;
    rst = 1; lwe = 0; la = 0; ld = 0;
    deskew = TW'(38'h12_3456_789A);
    for (int i = 0; i < N; i++) hist[i] = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    repeat (3) @(posedge clk);
    for (int i = 0; i < NCAL; i++) shoot(0);
    repeat (10) @(posedge clk);
    tot = 0;
    for (int i = 0; i < N; i++) tot += hist[i];
    checks++;
    if (tot != NCAL) begin failures++; $display("FAIL %0d detections for %0d edges", tot, NCAL); end
    // load the LUT: R0(n) = 2^F * sum_{i>=n} H(i) / total, saturated
    s = 0;
    for (int n = (1 << RAW_W) - 1; n >= 0; n--) begin
      longint v;
      if (n < N) s += hist[n];
      v = (s * 8192) / tot;
      @(negedge clk);
      la = RAW_W'(n); lwe = 1; ld = (v > 8191) ? 13'h1fff : FP_W'(v);
    end
    @(negedge clk) lwe = 0; la = 9'd5;
    @(negedge clk);
    checks++;
    begin
      longint v5;
      s = 0;
      for (int i = 5; i < N; i++) s += hist[i];
      v5 = (s * 8192) / tot;
      if (int'(lq) != int'((v5 > 8191) ? 8191 : v5)) begin failures++; $display("FAIL LUT read-back"); end
    end
    measuring = 1;
    for (int i = 0; i < NMEAS; i++) shoot(1);
    repeat (10) @(posedge clk);
    checks += 3;
    if (nmeas != NMEAS) begin failures++; $display("FAIL %0d timestamps for %0d edges", nmeas, NMEAS); end
    begin
      real mean, sd;
      mean = err_sum / nmeas;
      sd = $sqrt(err_sum2 / nmeas - mean * mean);
      $display("timestamps %0d, mean error %0.1f ps, standard deviation %0.1f ps, RMS error %0.1f ps, max %0.1f ps",
               nmeas, mean, sd, $sqrt(err_sum2 / nmeas), err_max);
      if (sd > 40.0) begin failures++; $display("FAIL standard deviation"); end
      if (mean < -60.0 || mean > 60.0) begin failures++; $display("FAIL mean error"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
