// tb_bootloader -- checks the boot copy: an E2PROM model returns a byte pattern
// for each 13-bit address; the bootloader must write every word of program
// memory in little-endian order, keep the CPU in reset until the copy ends and
// then release it.
module tb_bootloader;
  import cimu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [12:0] ea; logic [7:0] ed; bus_req_t req; bus_rsp_t rsp; logic cpu_rst_n, done;
  int checks = 0, failures = 0;
  bootloader dut (.clk, .rst_n, .e2p_addr(ea), .e2p_data(ed), .pm_req(req), .pm_rsp(rsp), .cpu_rst_n, .done);
  function automatic logic [7:0] rom(input logic [12:0] a); return 8'(a * 7 + (a >> 8)); endfunction
  assign ed = rom(ea);
  logic [31:0] pm [2048];
  int writes = 0, early = 0;
  always @(posedge clk) if (rst_n) begin
    if (req.valid && req.we && rsp.ready) begin pm[req.addr[12:2]] <= req.wdata; writes++; end
    if (cpu_rst_n && writes < 2048) early++;
  end
  // the memory accepts every other write request
  logic toggle = 0;
  always @(posedge clk) toggle <= ~toggle;
  assign rsp = '{ready: req.valid && toggle, rdata: '0};
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    checks++; if (cpu_rst_n) failures++;
    while (!done) @(posedge clk);
    @(posedge clk);
    checks++; if (writes != 2048) begin failures++; $display("FAIL writes %0d", writes); end
    checks++; if (early != 0 || !cpu_rst_n) begin failures++; $display("FAIL cpu released early"); end
    for (int w = 0; w < 2048; w++) begin
      logic [31:0] e;
      for (int b = 0; b < 4; b++) e[b*8 +: 8] = rom(13'(4 * w + b));
      checks++; if (pm[w] != e) begin failures++; if (failures < 5) $display("FAIL word %0d", w); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
