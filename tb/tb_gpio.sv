// tb_gpio -- checks the GPIO registers: OUT and DIR drive the pins and read
// back, IN shows the pin values after the synchronizer.
module tb_gpio;
  import cimu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  apb_req_t req; apb_rsp_t rsp; logic [31:0] gi, go, goe;
  gpio dut (.clk, .rst_n, .apb_req(req), .apb_rsp(rsp), .gpio_i(gi), .gpio_o(go), .gpio_oe(goe));
  `include "tb_apb_periph.svh"
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [31:0] d, v;
    req = '0; gi = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      v = $urandom; apb_wr(12'h0, v); chk(go == v, "out pins"); apb_rd(12'h0, d); chk(d == v, "out readback");
      v = $urandom; apb_wr(12'h4, v); chk(goe == v, "dir pins"); apb_rd(12'h4, d); chk(d == v, "dir readback");
      v = $urandom; gi = v; repeat (3) @(posedge clk); apb_rd(12'h8, d); chk(d == v, "in");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
