// tb_pmem -- checks the 128 kB program memory: random writes on the bus port
// read back on both the bus port and the instruction port.
module tb_pmem;
  import cimu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  bus_req_t req; bus_rsp_t rsp;
  int checks = 0, failures = 0;
  bus_req_t ireq; bus_rsp_t irsp;
  pmem dut (.clk, .rst_n, .i_req(ireq), .i_rsp(irsp), .b_req(req), .b_rsp(rsp));
  logic [31:0] model [int];
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic xfer(input bit we, input logic [31:0] a, input logic [31:0] d, input logic [3:0] be, output logic [31:0] q, output int lat);
    @(negedge clk); req = '{valid: 1'b1, we: we, addr: a, wdata: d, be: be}; lat = 0;
    #1; while (!rsp.ready) begin @(negedge clk); #1; lat++; end
    q = rsp.rdata;
    @(posedge clk); #1 req.valid = 1'b0;
  endtask
  initial begin
    logic [31:0] q; int lat;
    req = '0; ireq = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      int a; logic [31:0] d; logic [3:0] be;
      a = (i < 2) ? (i == 0 ? 0 : 32767) : $urandom_range(0, 32767);
      d = $urandom; be = model.exists(a) ? 4'($urandom) : 4'hF;
      if (!model.exists(a)) model[a] = 0;
      for (int b = 0; b < 4; b++) if (be[b]) model[a][b*8 +: 8] = d[b*8 +: 8];
      xfer(1, 4 * a, d, be, q, lat);
    end
    foreach (model[a]) begin
      xfer(0, 4 * a, 0, 4'hF, q, lat);
      checks++; if (q != model[a]) begin failures++; $display("FAIL word %0d", a); end
      checks++; if (lat != 1) begin failures++; $display("FAIL read latency %0d", lat); end
      @(negedge clk); ireq = '{valid: 1'b1, we: 1'b0, addr: 4 * a, wdata: '0, be: 4'hF};
      @(negedge clk); #1;
      checks++; if (!irsp.ready || irsp.rdata != model[a]) begin failures++; $display("FAIL fetch %0d", a); end
      @(posedge clk); #1 ireq.valid = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
