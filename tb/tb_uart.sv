// tb_uart -- checks the UART: the tx line carries start bit, 8 data bits LSB
// first and stop bit at DIV cycles per bit, and a frame driven on rx arrives
// in DATA with rx valid set; tx is looped back to rx for random bytes.
module tb_uart;
  import cimu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  apb_req_t req; apb_rsp_t rsp; logic tx, rx;
  uart dut (.clk, .rst_n, .apb_req(req), .apb_rsp(rsp), .tx, .rx);
  assign rx = tx;
  `include "tb_apb_periph.svh"
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [31:0] d;
    req = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    apb_wr(12'h8, 8);
    for (int t = 0; t < 12; t++) begin
      logic [7:0] b; logic [9:0] frame; int bitlen;
      b = 8'($urandom);
      apb_wr(12'h0, b);
      // sample the line in the middle of every bit
      while (tx) @(posedge clk);
      repeat (4) @(posedge clk);
      for (int i = 0; i < 10; i++) begin frame[i] = tx; repeat (8) @(posedge clk); end
      chk(frame == {1'b1, b, 1'b0}, $sformatf("tx frame %h", frame));
      repeat (8) @(posedge clk);
      apb_rd(12'h4, d); chk(d[1] == 1'b1 && d[0] == 1'b0, "rx valid, tx idle");
      apb_rd(12'h0, d); chk(d[7:0] == b, $sformatf("rx byte %h exp %h", d[7:0], b));
      apb_rd(12'h4, d); chk(d[1] == 1'b0, "rx valid cleared");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
