// tb_mem_rw_if -- checks the matrix load interface with a small row store on
// the array side: 24 words form one 768-bit row write that takes 20 cycles,
// partial byte writes, and reads that fetch a row and return its words.
module tb_mem_rw_if;
  import cimu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  bus_req_t req; bus_rsp_t rsp;
  logic [9:0] row_addr; logic row_en, row_we; logic [767:0] row_wdata, row_rdata;
  logic [767:0] store [768];
  int checks = 0, failures = 0;
  mem_rw_if dut (.clk, .rst_n, .req, .rsp, .row_addr, .row_en, .row_we, .row_wdata, .row_rdata);
  assign row_rdata = store[row_addr];
  int we_cycle, last_word_cycle, cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (row_en && row_we) begin store[row_addr] <= row_wdata; we_cycle = cyc; end
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask
  task automatic xfer(input bit we, input logic [31:0] a, input logic [31:0] d, input logic [3:0] be, output logic [31:0] q);
    @(negedge clk); req = '{valid: 1'b1, we: we, addr: a, wdata: d, be: be};
    #1; while (!rsp.ready) begin @(negedge clk); #1; end
    q = rsp.rdata;
    @(posedge clk); #1 req.valid = 1'b0;
  endtask
  logic [767:0] ref_rows [4];
  initial begin
    logic [31:0] q;
    req = '0;
    for (int r = 0; r < 768; r++) store[r] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    foreach (ref_rows[i]) begin
      int row; row = 100 * i + 7;
      for (int k = 0; k < 24; k++) begin
        ref_rows[i][k*32 +: 32] = $urandom;
        xfer(1, 4 * (row * 24 + k), ref_rows[i][k*32 +: 32], 4'hF, q);
      end
      last_word_cycle = cyc;
      xfer(1, 4 * (row * 24), ref_rows[i][31:0], 4'hF, q);   // stalls until the row write is over
      chk(we_cycle - last_word_cycle >= 19 && we_cycle - last_word_cycle <= 21, $sformatf("row write took %0d", we_cycle - last_word_cycle));
      chk(store[row] == ref_rows[i], $sformatf("row %0d written", row));
    end
    // byte-enable write into row 7 word 3, then complete the row
    for (int k = 0; k < 24; k++) xfer(1, 4 * (7 * 24 + k), ref_rows[0][k*32 +: 32], 4'hF, q);
    repeat (25) @(posedge clk);
    for (int i = 3; i >= 0; i--) begin
      int row; row = 100 * i + 7;
      for (int k = 0; k < 24; k += 5) begin
        xfer(0, 4 * (row * 24 + k), 0, 4'hF, q);
        chk(q == ref_rows[i][k*32 +: 32], $sformatf("read row %0d word %0d", row, k));
      end
    end
    xfer(1, 4 * (307 * 24 + 2), 32'hA5A5_A5A5, 4'b0010, q);
    for (int k = 0; k < 24; k++) if (k != 2) xfer(1, 4 * (307 * 24 + k), ref_rows[3][k*32 +: 32], 4'hF, q);
    repeat (25) @(posedge clk);
    xfer(0, 4 * (307 * 24 + 2), 0, 4'hF, q);
    chk(q[15:8] == 8'hA5, "byte lane 1 written");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
