// tb_near_mem_dp -- checks one near-memory datapath: random codes, offsets,
// scales and exponents over several bit-planes are accumulated per group of Ba
// columns and compared with an integer model; ReLU, 16-bit saturation, ABN
// capture and the 8-cycle pass length are checked too.
module tb_near_mem_dp;
  import cimu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, first, busy, done, relu, o16; logic [3:0] gexp, ba;
  logic signed [8:0] goff; logic [7:0] adc [8]; logic abn_bit [8]; col_cfg_t cc [8];
  logic [31:0] result [8]; logic [7:0] abn_q;
  int checks = 0, failures = 0;
  near_mem_dp dut (.clk, .rst_n, .start, .first_plane(first), .gexp, .ba, .goff, .adc, .abn_bit,
                   .ccfg(cc), .relu_en(relu), .out16_en(o16), .busy, .done, .result, .abn_q);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    start = 0; first = 0; relu = 0; o16 = 0; gexp = 0; ba = 1; goff = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      longint acc [8];
      int b, planes;
      b = (t % 4 == 0) ? 1 : (t % 4 == 1) ? 2 : (t % 4 == 2) ? 4 : 3;
      ba = 4'(b); relu = t[2]; o16 = t[3];
      planes = $urandom_range(1, 4);
      foreach (acc[i]) acc[i] = 0;
      for (int i = 0; i < 8; i++) begin
        cc[i].loff = 9'($urandom_range(0, 511)); cc[i].lscale = 8'($urandom_range(0, 255));
        cc[i].lexp = 4'($urandom_range(0, 6)); cc[i].dac = '0;
      end
      for (int p = planes - 1; p >= 0; p--) begin
        int cyc;
        goff = 9'($urandom_range(0, 511)); gexp = 4'(p);
        for (int i = 0; i < 8; i++) begin adc[i] = 8'($urandom); abn_bit[i] = 1'($urandom); end
        for (int i = 0; i < 8; i++) begin
          longint s;
          s = (longint'(adc[i]) + longint'(goff) + longint'(cc[i].loff)) * longint'(cc[i].lscale);
          s = s <<< (int'(cc[i].lexp) + p);
          acc[i / b] = ((p == planes - 1 && i % b == 0) ? 0 : acc[i / b]) + s;
        end
        @(negedge clk); start = 1; first = (p == planes - 1); @(negedge clk); start = 0; cyc = 1;
        while (!done) begin @(negedge clk); cyc++; end
        checks++; if (cyc != 9) begin failures++; $display("FAIL pass took %0d", cyc); end
        checks++; if (abn_q != {abn_bit[7], abn_bit[6], abn_bit[5], abn_bit[4], abn_bit[3], abn_bit[2], abn_bit[1], abn_bit[0]}) failures++;
      end
      for (int e = 0; e < 8 / b; e++) begin
        longint v;
        v = longint'(int'(acc[e]));   // 32-bit wrap
        if (relu && v < 0) v = 0;
        if (o16 && v > 32767) v = 32767;
        if (o16 && v < -32768) v = -32768;
        checks++;
        if ($signed(result[e]) != int'(v)) begin failures++; $display("FAIL t%0d e%0d got %0d exp %0d", t, e, $signed(result[e]), v); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
