// Shared APB master tasks and check counters for the peripheral testbenches.
// Expects clk, req (apb_req_t) and rsp (apb_rsp_t) in the including module.
int checks = 0, failures = 0;
task automatic chk(input bit ok, input string s);
  checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
endtask
task automatic apb_wr(input logic [11:0] a, input logic [31:0] d);
  @(negedge clk); req = '{psel: 1'b1, penable: 1'b0, pwrite: 1'b1, paddr: a, pwdata: d};
  @(negedge clk); req.penable = 1'b1; @(negedge clk); req = '0;
endtask
task automatic apb_rd(input logic [11:0] a, output logic [31:0] d);
  @(negedge clk); req = '{psel: 1'b1, penable: 1'b0, pwrite: 1'b0, paddr: a, pwdata: '0};
  @(negedge clk); req.penable = 1'b1; #1 d = rsp.prdata; @(negedge clk); req = '0;
endtask
