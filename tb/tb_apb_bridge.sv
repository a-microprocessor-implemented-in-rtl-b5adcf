// tb_apb_bridge -- checks the bus-to-APB bridge with five register-file
// slaves that insert random wait states: each bus write lands in the right
// slave at the right register, reads return it, the setup/access phase order
// holds, and an unmapped slave number answers 0 without hanging.
module tb_apb_bridge;
  import cimu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  bus_req_t req; bus_rsp_t rsp; apb_req_t areq [5]; apb_rsp_t arsp [5];
  apb_bridge dut (.clk, .rst_n, .req, .rsp, .apb_req(areq), .apb_rsp(arsp));
  int checks = 0, failures = 0, bad_phase = 0;
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask
  logic [31:0] regs [5][16];
  int wl [5];
  logic [4:0] setup_seen;
  for (genvar s = 0; s < 5; s++) begin : g_s
    always_comb begin
      arsp[s].pready = (wl[s] == 0);
      arsp[s].prdata = regs[s][areq[s].paddr[5:2]];
    end
    always @(posedge clk) begin
      if (areq[s].psel && !areq[s].penable) begin setup_seen[s] <= 1'b1; wl[s] <= $urandom_range(0, 3); end
      if (areq[s].psel && areq[s].penable) begin
        if (!setup_seen[s]) bad_phase++;
        if (wl[s] > 0) wl[s] <= wl[s] - 1;
        else begin
          setup_seen[s] <= 1'b0;
          if (areq[s].pwrite) regs[s][areq[s].paddr[5:2]] <= areq[s].pwdata;
        end
      end
    end
  end
  task automatic xfer(input logic we, input logic [31:0] a, input logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk); req = '{valid: 1'b1, we: we, addr: a, wdata: wd, be: 4'hF};
    // the transfer completes at the first rising edge that sees ready
    do @(posedge clk); while (!rsp.ready);
    rd = rsp.rdata;
    @(negedge clk); req = '0;
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [31:0] ref_r [5][16], d;
    req = '0; setup_seen = '0;
    for (int s = 0; s < 5; s++) begin wl[s] = 0; for (int i = 0; i < 16; i++) begin regs[s][i] = 0; ref_r[s][i] = 0; end end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int s, r; logic we; logic [31:0] v;
      s = $urandom_range(0, 4); r = $urandom_range(0, 15); we = 1'($urandom); v = $urandom;
      xfer(we, 32'h3000_0000 | 32'(s << 12) | 32'(r * 4), v, d);
      if (we) ref_r[s][r] = v;
      else chk(d == ref_r[s][r], $sformatf("read slave %0d reg %0d", s, r));
    end
    xfer(1'b0, 32'h3000_7000, 0, d); chk(d == 0, "unmapped slave reads 0");
    for (int s = 0; s < 5; s++)
      for (int i = 0; i < 16; i++) begin
        xfer(1'b0, 32'h3000_0000 | 32'(s << 12) | 32'(i * 4), 0, d);
        chk(d == ref_r[s][i], $sformatf("register contents s%0d r%0d", s, i));
      end
    chk(bad_phase == 0, "access follows setup");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
