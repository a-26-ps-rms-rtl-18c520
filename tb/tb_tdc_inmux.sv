`timescale 1ps / 1ps
// tb_tdc_inmux: exhaustive check of the channel input multiplexer.
module tb_tdc_inmux;
  int checks = 0, failures = 0;
  logic sig, cal, sel, o;

  tdc_inmux dut (.sig_i(sig), .calib_i(cal), .sel_i(sel), .o);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 4; r++)
      for (int i = 0; i < 8; i++) begin
        {sel, cal, sig} = 3'(i);
        #10;
        checks++;
        if (o !== (sel ? cal : sig)) begin
          failures++;
          $display("FAIL sel=%0b cal=%0b sig=%0b o=%0b", sel, cal, sig, o);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
