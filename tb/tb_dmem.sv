// tb_dmem -- checks the 128 kB data memory: random word and byte-enable writes
// over the whole address range read back through the one-wait-state read.
module tb_dmem;
  import cimu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  bus_req_t req; bus_rsp_t rsp;
  int checks = 0, failures = 0;
  dmem dut (.clk, .rst_n, .req, .rsp);
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
    req = '0;
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
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
