`timescale 1ps / 1ps
// tb_tdc_ringosc: measures each half period and the mean period of the model
// at two delay scales (1.0 and 1.013, the 1.3 % temperature effect), and
// checks that the output stops low when disabled.
module tb_tdc_ringosc;
  int checks = 0, failures = 0;
  logic en, ro;
  realtime t0, t1;

  tdc_ringosc #(.HALF_PERIOD_PS(22600)) dut (.en_i(en), .clk_o(ro));

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // every one of 20 half periods (high and low phases alike) must last
  // exp_period / 2 within 1 ps, and the 10-period total within 2 ps
  task automatic measure(input real exp_period);
    realtime te;
    @(posedge ro) t0 = $realtime;
    te = t0;
    for (int i = 0; i < 20; i++) begin
      @(ro);
      checks++;
      if ($realtime - te < exp_period / 2.0 - 1.0 || $realtime - te > exp_period / 2.0 + 1.0) begin
        failures++;
        $display("FAIL half period %f exp %f", $realtime - te, exp_period / 2.0);
      end
      te = $realtime;
    end
    t1 = $realtime;
    checks++;
    if ((t1 - t0) / 10.0 < exp_period - 2.0 || (t1 - t0) / 10.0 > exp_period + 2.0) begin
      failures++;
      $display("FAIL period %f exp %f", (t1 - t0) / 10.0, exp_period);
    end
  endtask

  initial begin
    en = 1;
    measure(45200.0);
    tdc_pvt_pkg::delay_scale = 1.013;
    @(posedge ro);
    measure(45200.0 * 1.013);
    tdc_pvt_pkg::delay_scale = 1.0;
    en = 0;
    #200000;
    checks++;
    if (ro !== 1'b0) begin failures++; $display("FAIL still running"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
