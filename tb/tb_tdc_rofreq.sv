`timescale 1ps / 1ps
// tb_tdc_rofreq: ring oscillator frequency against temperature, as reported by
// the TDC core itself through its dbg_freq_o outputs. The core runs at its
// default sizes (2 channels, 124 CARRY4, 2^14-cycle frequency counter, 8 ns
// clock). After the startup calibration at 37 C the temperature is swept from
// 29.5 C to 43.5 C in 1 C steps. Temperature is emulated by scaling every
// model delay by 1 + 0.013 * (T - 37) / 15 (the 1.3 % over 15 degrees C
// measured on the original hardware). After each step the testbench waits for
// two complete online-calibration rounds over both channels, then reads the
// counts.
//
// Checks, with the expected counts worked out here from the oscillator half
// periods (22600 ps and 22697 ps, the top's defaults):
//   * each count is within 2 of 2^14 * 8000 / (2 * half * scale);
//   * the counts never rise as the temperature goes up;
//   * over the sweep both channels drop by 1.0 % to 1.4 %;
//   * a least-squares line fits each channel within 2 counts, and the two
//     slopes agree within 10 %.
module tb_tdc_rofreq;
  localparam int CH = 2, RAW_W = 9, FP_W = 13, HIS_W = 18, CW = 25, FCW = 13, TW = CW + FP_W;
  localparam int NSTEP = 15;
  localparam real T0 = 29.5;
  localparam int HALF [CH] = '{22600, 22697};
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
    #100000000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real scale_at(input real t);
    return 1.0 + 0.013 * (t - 37.0) / 15.0;
  endfunction

  initial begin
    real temp [NSTEP];
    int f [CH][NSTEP];
    deskew[0] = '0; deskew[1] = '0;
    rst = 1;
    repeat (4) @(posedge clk);
    @(negedge clk) rst = 0;
    wait (ready);
    $display("startup calibration at 37 C done at %0t, f0 = %0d, %0d", $time, dbg_freq0[0], dbg_freq0[1]);
    for (int s = 0; s < NSTEP; s++) begin
      temp[s] = T0 + real'(s);
      tdc_pvt_pkg::delay_scale = scale_at(temp[s]);
      // two rounds of (frequency measurement + LUT pass) per channel
      repeat (2 * CH * ((1 << 14) + 512 * 40)) @(posedge clk);
      for (int c = 0; c < CH; c++) begin
        real expect_f;
        f[c][s] = int'(dbg_freq[c]);
        expect_f = real'(1 << 14) * 8000.0 / (2.0 * real'(HALF[c]) * scale_at(temp[s]));
        checks++;
        if (real'(f[c][s]) < expect_f - 2.0 || real'(f[c][s]) > expect_f + 2.0) begin
          failures++; $display("FAIL channel %0d at %0.1f C: count %0d, expected %0.1f", c, temp[s], f[c][s], expect_f);
        end
        if (s > 0) begin
          checks++;
          if (f[c][s] > f[c][s-1]) begin failures++; $display("FAIL channel %0d count rose at %0.1f C", c, temp[s]); end
        end
      end
      $display("%0.1f C: channel 1 %0d, channel 2 %0d", temp[s], f[0][s], f[1][s]);
    end
    begin
      real slope [CH];
      for (int c = 0; c < CH; c++) begin
        real sx, sy, sxx, sxy, b, a, drop, worst;
        sx = 0; sy = 0; sxx = 0; sxy = 0;
        for (int s = 0; s < NSTEP; s++) begin
          sx += temp[s]; sy += real'(f[c][s]); sxx += temp[s] * temp[s]; sxy += temp[s] * real'(f[c][s]);
        end
        b = (NSTEP * sxy - sx * sy) / (NSTEP * sxx - sx * sx);
        a = (sy - b * sx) / NSTEP;
        worst = 0;
        for (int s = 0; s < NSTEP; s++) begin
          real r;
          r = real'(f[c][s]) - (a + b * temp[s]);
          if (r < 0) r = -r;
          if (r > worst) worst = r;
        end
        slope[c] = b;
        drop = 100.0 * real'(f[c][0] - f[c][NSTEP-1]) / real'(f[c][0]);
        $display("channel %0d: slope %0.2f counts/C, drop %0.2f %% over %0.0f C, worst residual %0.2f counts",
                 c + 1, b, drop, temp[NSTEP-1] - temp[0], worst);
        checks += 2;
        if (drop < 1.0 || drop > 1.4) begin failures++; $display("FAIL channel %0d drop", c); end
        if (worst > 2.0) begin failures++; $display("FAIL channel %0d not linear", c); end
      end
      checks++;
      if (slope[1] / slope[0] < 0.9 || slope[1] / slope[0] > 1.1) begin
        failures++; $display("FAIL channel slopes differ");
      end
    end
    tdc_pvt_pkg::delay_scale = 1.0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
