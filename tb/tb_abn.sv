// tb_abn -- checks the binarizing comparator model against level/ncap > dac/64
// for random inputs, and its 20-cycle decision time.
module tb_abn;
  logic clk = 0, rst_n = 0, start = 0, out, done;
  logic [11:0] level, ncap;
  logic [5:0] dac;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  abn dut (.clk, .rst_n, .start, .level, .ncap, .dac, .out, .done);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int cyc; bit e;
      ncap = 12'(576 * $urandom_range(1, 4));
      level = 12'($urandom_range(0, int'(ncap)));
      dac = 6'($urandom_range(0, 63));
      e = (real'(level) / real'(ncap)) > (real'(dac) / 64.0);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++; if (out != e) begin failures++; $display("FAIL level %0d ncap %0d dac %0d", level, ncap, dac); end
      checks++; if (cyc != 20) begin failures++; $display("FAIL latency %0d", cyc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
