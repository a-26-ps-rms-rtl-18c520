`timescale 1ps / 1ps
// tb_tdc_lut: loads the table through the controller port and reads it back
// through both ports, against a reference array.
module tb_tdc_lut;
  localparam int RAW_W = 9, FP_W = 13;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [RAW_W-1:0] ra, ca;
  logic [FP_W-1:0]  rd, cwd, crd;
  logic             cwe;
  logic [FP_W-1:0]  model [2**RAW_W];

  tdc_lut #(.RAW_W(RAW_W), .FP_W(FP_W)) dut (
    .clk_i(clk), .ra_i(ra), .rd_o(rd), .ca_i(ca), .cwe_i(cwe), .cwd_i(cwd), .crd_o(crd));

  always #4000 clk = ~clk;

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cwe = 0; ra = 0; ca = 0; cwd = 0;
    for (int i = 0; i < 2**RAW_W; i++) begin
      @(negedge clk);
      ca = RAW_W'(i); cwd = FP_W'($urandom); cwe = 1;
      model[i] = cwd;
    end
    @(negedge clk) cwe = 0;
    for (int k = 0; k < 600; k++) begin
      logic [RAW_W-1:0] a, b;
      a = RAW_W'($urandom); b = RAW_W'($urandom);
      @(negedge clk);
      ra = a; ca = b; cwe = (k % 3 == 0); cwd = FP_W'($urandom);
      @(posedge clk); #1;
      checks += 2;
      if (rd !== model[a]) begin failures++; $display("FAIL rd[%0d]=%0d exp %0d", a, rd, model[a]); end
      if (crd !== model[b]) begin failures++; $display("FAIL crd[%0d]=%0d exp %0d", b, crd, model[b]); end
      if (cwe) model[b] = cwd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
