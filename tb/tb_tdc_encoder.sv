`timescale 1ps / 1ps
// tb_tdc_encoder: drives sorted delay-line patterns (new edge reaching k taps,
// sometimes with an older edge still further down the line), with random gaps
// between edges, and checks detect/polarity/raw two cycles later, including
// the suppression of edges that fall inside the dead time.
module tb_tdc_encoder;
  localparam int N = 496, RAW_W = 9, DT = 3, M = 4000;
  int checks = 0, failures = 0, n_det = 0, n_dead = 0;
  logic clk = 0, rst;
  logic [N-1:0] line;
  logic det, pol;
  logic [RAW_W-1:0] raw;
  logic e_det [M];
  logic e_pol [M];
  int   e_raw [M];

  tdc_encoder #(.TAPS(N), .RAW_W(RAW_W), .DEADTIME(DT)) dut (
    .clk_i(clk), .rst_i(rst), .line_i(line), .detect_o(det), .polarity_o(pol), .raw_o(raw));

  always #4000 clk = ~clk;

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic lvl;
    int since;   // cycles since the last detected edge
    rst = 1; line = '0; lvl = 0; since = 100;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int c = 0; c < M; c++) begin
      int k, m;
      e_det[c] = 0; e_pol[c] = lvl; e_raw[c] = 0;
      if (c > 2 && $urandom % 3 == 0) begin
        // new edge of polarity ~lvl that reached k taps
        k = 1 + int'($urandom % N);
        lvl = ~lvl;
        line = {N{~lvl}};
        for (int i = 0; i < k; i++) line[N-1-i] = lvl;
        // an older edge further down, occasionally
        if (k < N - 10 && $urandom % 4 == 0) begin
          m = k + 1 + int'($urandom % (N - k - 1));
          for (int i = m; i < N; i++) line[N-1-i] = lvl;
        end
        if (since >= DT) begin
          e_det[c] = 1; e_raw[c] = N - k; since = 0;
        end else n_dead++;
        e_pol[c] = lvl;
      end else begin
        line = {N{lvl}};
      end
      since++;
      @(posedge clk); #1;
      if (c >= 1) begin
        checks++;
        if (det !== e_det[c-1]) begin
          failures++; $display("FAIL cycle %0d detect=%0b exp %0b", c-1, det, e_det[c-1]);
        end
        if (e_det[c-1]) begin
          n_det++;
          checks += 2;
          if (pol !== e_pol[c-1]) begin failures++; $display("FAIL cycle %0d pol", c-1); end
          if (int'(raw) != e_raw[c-1]) begin
            failures++; $display("FAIL cycle %0d raw=%0d exp %0d", c-1, raw, e_raw[c-1]);
          end
        end
      end
      @(negedge clk);
    end
    checks++;
    if (n_det < 100 || n_dead < 10) begin
      failures++; $display("FAIL coverage det=%0d dead=%0d", n_det, n_dead);
    end
    $display("edges detected %0d, suppressed by dead time %0d", n_det, n_dead);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
