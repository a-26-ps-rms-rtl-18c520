`timescale 1ps / 1ps
// tb_tdc_freqc: measures two oscillators of known period over 2^10 cycles of
// an 8 ns clock, checks the counts (+-1), the measurement time and the
// saturation of a narrow counter.
module tb_tdc_freqc;
  localparam int TW = 10;
  int checks = 0, failures = 0;
  logic clk = 0, rst;
  logic [1:0] ro;
  logic sel, start, done, done6;
  logic [12:0] cnt;
  logic [5:0]  cnt6;
  int exp_cnt [2];

  always #4000 clk = ~clk;
  tdc_ringosc #(.HALF_PERIOD_PS(22600)) u_r0 (.en_i(1'b1), .clk_o(ro[0]));
  tdc_ringosc #(.HALF_PERIOD_PS(11000)) u_r1 (.en_i(1'b1), .clk_o(ro[1]));

  tdc_freqc #(.CHANNELS(2), .FCOUNT_W(13), .FTIMER_W(TW)) dut (
    .clk_i(clk), .rst_i(rst), .ro_i(ro), .sel_i(sel), .start_i(start), .done_o(done), .count_o(cnt));
  tdc_freqc #(.CHANNELS(2), .FCOUNT_W(6), .FTIMER_W(TW)) dut6 (
    .clk_i(clk), .rst_i(rst), .ro_i(ro), .sel_i(sel), .start_i(start), .done_o(done6), .count_o(cnt6));

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    exp_cnt[0] = (1 << TW) * 8000 / 45200;
    exp_cnt[1] = (1 << TW) * 8000 / 22000;
    rst = 1; start = 0; sel = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int rep = 0; rep < 4; rep++) begin
      int cyc;
      sel = 1'(rep % 2);
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks += 3;
      if (cyc < (1 << TW) || cyc > (1 << TW) + 2) begin failures++; $display("FAIL took %0d cycles", cyc); end
      if (int'(cnt) < exp_cnt[sel] - 1 || int'(cnt) > exp_cnt[sel] + 1) begin
        failures++; $display("FAIL ch%0d count %0d exp %0d", sel, cnt, exp_cnt[sel]);
      end
      if (cnt6 !== 6'h3f) begin failures++; $display("FAIL saturation %0d", cnt6); end
      $display("ch%0d count %0d (expected about %0d)", sel, cnt, exp_cnt[sel]);
      repeat (5) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
