// tb_cima -- checks the array model at full size (2304 x 256): row writes and
// reads through one-hot word lines, and the per-column count of charged
// capacitors for XNOR, AND and masked rows with bank gating, against a count
// made here from the written bits; also the 50-cycle compute time.
module tb_cima;
  localparam int NR = 2304, NC = 256, WR = NR / 3, RB = NC * 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [WR-1:0] wl; logic we; logic [RB-1:0] wdata, rdata;
  logic [NR-1:0] x_n, xb_n; logic [3:0] rbe, cbe; logic start, busy, done;
  logic [11:0] level [NC]; logic [11:0] ncap;
  int checks = 0, failures = 0;
  cima dut (.clk, .rst_n, .wl, .we, .wdata, .rdata, .x_n, .xb_n, .row_bank_en(rbe),
            .col_bank_en(cbe), .start, .busy, .done, .level, .ncap);
  logic [NC-1:0] w [NR];
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask
  initial begin
    wl = '0; we = 0; start = 0; x_n = '1; xb_n = '1; rbe = 4'hF; cbe = 4'hF;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < WR; r++) begin
      @(negedge clk);
      for (int k = 0; k < 3; k++) begin
        for (int m = 0; m < NC; m += 32) w[3*r+k][m +: 32] = $urandom;
        wdata[k*NC +: NC] = w[3*r+k];
      end
      wl = '0; wl[r] = 1'b1; we = 1;
    end
    @(negedge clk); we = 0;
    for (int r = 0; r < WR; r += 97) begin
      @(negedge clk); wl = '0; wl[r] = 1'b1; #1;
      chk(rdata == {w[3*r+2], w[3*r+1], w[3*r]}, $sformatf("read row %0d", r));
    end
    for (int t = 0; t < 4; t++) begin
      bit andm; int cyc;
      logic [NR-1:0] xb, msk;
      andm = t[0];
      rbe = (t == 3) ? 4'b0110 : 4'hF;
      cbe = (t == 3) ? 4'b1011 : 4'hF;
      for (int n = 0; n < NR; n++) begin
        xb[n] = $urandom_range(0, 1);
        msk[n] = (t >= 2) ? ($urandom_range(0, 3) == 0) : 1'b0;
        x_n[n]  = msk[n] | andm | xb[n];
        xb_n[n] = msk[n] | ~xb[n];
      end
      @(negedge clk); start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      chk(cyc == 50, $sformatf("latency %0d", cyc));
      chk(ncap == 12'(576 * $countones(rbe)), "ncap");
      for (int m = 0; m < NC; m++) begin
        int c;
        c = 0;
        if (cbe[m / 64])
          for (int n = 0; n < NR; n++)
            if (rbe[n / 576] && !msk[n])
              c += andm ? int'(xb[n] & w[n][m]) : int'(xb[n] == w[n][m]);
        chk(level[m] == 12'(c), $sformatf("test %0d col %0d level %0d exp %0d", t, m, level[m], c));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
