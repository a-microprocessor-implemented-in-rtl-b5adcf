// tb_cimu_seq -- checks the bit-plane sequencer against simple stand-ins for
// the array (done 50 cycles after start), converters (20) and datapaths (8):
// planes run MSB first, four load cycles each, first_plane only on the first,
// and an operation of Bx planes takes Bx times the per-plane cycle count.
module tb_cimu_seq;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, ld_en, cima_start, cima_done, conv_start, conv_done, dp_start, dp_first, dp_done;
  logic [3:0] bx; logic [2:0] plane; logic [1:0] chunk; logic [31:0] cycles;
  int checks = 0, failures = 0;
  cimu_seq dut (.clk, .rst_n, .start, .bx, .busy, .done, .plane, .chunk, .ld_en, .cima_start, .cima_done,
                .conv_start, .conv_done, .dp_start, .dp_first, .dp_done, .cycles);
  int c1 = -1, c2 = -1, c3 = -1;
  always @(posedge clk) begin
    cima_done <= (c1 == 1); conv_done <= (c2 == 1); dp_done <= (c3 == 1);
    c1 <= cima_start ? 49 : (c1 > 0 ? c1 - 1 : -1);
    c2 <= conv_start ? 19 : (c2 > 0 ? c2 - 1 : -1);
    c3 <= dp_start ? 8 : (c3 > 0 ? c3 - 1 : -1);
  end
  int loads, firsts, dps; int planes_seen [$];
  always @(posedge clk) begin
    if (ld_en) loads++;
    if (dp_start) begin dps++; planes_seen.push_back(plane); if (dp_first) firsts++; end
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int per;
    start = 0; bx = 1; cima_done = 0; conv_done = 0; dp_done = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int b = 1; b <= 8; b++) begin
      int cyc;
      loads = 0; firsts = 0; dps = 0; planes_seen = {};
      @(negedge clk); bx = 4'(b); start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      if (b == 1) per = cyc;
      checks++; if (loads != 4 * b) begin failures++; $display("FAIL loads %0d", loads); end
      checks++; if (firsts != 1 || dps != b) begin failures++; $display("FAIL dp starts"); end
      checks++; if (cyc != 1 + b * (per - 1)) begin failures++; $display("FAIL bx %0d took %0d, per plane %0d", b, cyc, per - 1); end
      checks++; if (cycles != 32'(cyc)) begin failures++; $display("FAIL cycles reg %0d vs %0d", cycles, cyc); end
      for (int i = 0; i < b; i++) begin
        checks++; if (planes_seen[i] != b - 1 - i) begin failures++; $display("FAIL plane order %0d: %0d", i, planes_seen[i]); end
      end
    end
    checks++; if (per - 1 < 82 || per - 1 > 90) begin failures++; $display("FAIL per-plane %0d", per); end
    $display("per-plane cycles %0d", per - 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
