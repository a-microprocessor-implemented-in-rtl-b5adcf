// tb_sar_adc -- checks the ADC model: code = min(255, floor(level*256/fs)) over
// random inputs and full-scale settings, including the clipping range, and the
// 20-cycle conversion time from start to done.
module tb_sar_adc;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [11:0] level, fs;
  logic [7:0] code;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  sar_adc dut (.clk, .rst_n, .start, .level, .fs, .code, .busy, .done);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int exp_code, cyc;
      fs    = (t % 3 == 0) ? 12'd256 : 12'($urandom_range(64, 2304));
      level = 12'($urandom_range(0, (t % 5 == 0) ? 2304 : int'(fs)));
      exp_code = (int'(level) * 256) / int'(fs);
      if (exp_code > 255) exp_code = 255;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++; if (code != 8'(exp_code)) begin failures++; $display("FAIL level %0d fs %0d code %0d exp %0d", level, fs, code, exp_code); end
      checks++; if (cyc != 20) begin failures++; $display("FAIL latency %0d", cyc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
