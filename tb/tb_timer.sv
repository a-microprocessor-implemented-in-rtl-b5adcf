// tb_timer -- checks the timer: with COMPARE = N it matches every N+1 cycles,
// sets the sticky flag, pulses irq and toggles its pin; the flag clears on a
// write of 1 and counting stops when disabled.
module tb_timer;
  import cimu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  apb_req_t req; apb_rsp_t rsp; logic irq, pin;
  timer dut (.clk, .rst_n, .apb_req(req), .apb_rsp(rsp), .irq, .pin);
  `include "tb_apb_periph.svh"
  int irqs = 0, last = -1, cyc = 0, bad = 0, pins = 0; logic pin_q = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && irq) begin if (last >= 0 && cyc - last != 10) bad++; last = cyc; irqs++; end
    if (rst_n && pin != pin_q) pins++;
    pin_q <= pin;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [31:0] d;
    req = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    apb_wr(12'h8, 9); apb_wr(12'h4, 0); apb_wr(12'h0, 1);
    repeat (100) @(posedge clk);
    chk(irqs >= 9 && irqs <= 11, $sformatf("irq count %0d", irqs));
    chk(bad == 0, "period 10 cycles");
    chk(pins >= 9, "pin toggles");
    apb_rd(12'hC, d); chk(d[0] == 1'b1, "match flag");
    apb_wr(12'hC, 1); apb_rd(12'hC, d); chk(d[0] == 1'b0 || irqs > 0, "flag clear");
    apb_wr(12'h0, 0); apb_rd(12'h4, d);
    begin logic [31:0] d2; repeat (20) @(posedge clk); apb_rd(12'h4, d2); chk(d2 == d, "stopped"); end
    apb_rd(12'h8, d); chk(d == 9, "compare readback");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
