// tb_sys_bus -- checks the interconnect with two random masters and five
// memory slaves that answer after random waits. Every transfer's data is
// checked against a reference copy of the slave memories, the address
// decode is checked by giving each slave its own contents, and the test
// counts cycles in which the DMA master (0) won over a waiting CPU master (1).
module tb_sys_bus;
  import cimu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  bus_req_t m_req [2]; bus_rsp_t m_rsp [2]; bus_req_t s_req [5]; bus_rsp_t s_rsp [5];
  sys_bus dut (.clk, .rst_n, .m_req, .m_rsp, .s_req, .s_rsp);
  int checks = 0, failures = 0, contests = 0, multi = 0;
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  localparam logic [31:0] BASE [5] = '{32'h0000_0000, 32'h1000_0000, 32'h2000_0000, 32'h3000_0000, 32'h4000_0000};
  logic [31:0] smem [5][64];
  logic [31:0] rmem [5][64];
  int wl [5];
  for (genvar s = 0; s < 5; s++) begin : g_s
    always_comb begin
      s_rsp[s].ready = s_req[s].valid && wl[s] == 0;
      s_rsp[s].rdata = smem[s][s_req[s].addr[7:2]];
    end
    always @(posedge clk) begin
      if (s_req[s].valid && s_rsp[s].ready) begin
        if (s_req[s].we) smem[s][s_req[s].addr[7:2]] <= s_req[s].wdata;
        wl[s] <= $urandom_range(0, 2);
      end else if (s_req[s].valid && wl[s] > 0) wl[s] <= wl[s] - 1;
    end
  end
  always @(posedge clk) begin
    int n; n = 0;
    for (int s = 0; s < 5; s++) if (s_req[s].valid) n++;
    if (n > 1) multi++;
    if (m_req[0].valid && m_req[1].valid) contests++;
  end

  // one master issuing random transfers and checking read data
  task automatic master(input int m, input int count);
    for (int t = 0; t < count; t++) begin
      int s, w; logic we; logic [31:0] wd, rd;
      s = $urandom_range(0, 4); w = $urandom_range(0, 15) + 16 * m; we = 1'($urandom);
      wd = $urandom;
      @(negedge clk);
      m_req[m] = '{valid: 1'b1, we: we, addr: BASE[s] + 32'(w * 4), wdata: wd, be: 4'hF};
      // the transfer completes at the first rising edge that sees ready
      do @(posedge clk); while (!m_rsp[m].ready);
      rd = m_rsp[m].rdata;
      if (!we) chk(rd == rmem[s][w], $sformatf("m%0d read s%0d w%0d", m, s, w));
      else rmem[s][w] = wd;
      @(negedge clk); m_req[m] = '0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    m_req[0] = '0; m_req[1] = '0;
    for (int s = 0; s < 5; s++) begin wl[s] = 0; for (int i = 0; i < 64; i++) begin smem[s][i] = {8'(s), 24'($urandom)}; rmem[s][i] = smem[s][i]; end end
    repeat (2) @(posedge clk); rst_n = 1;
    fork master(0, 400); master(1, 400); join
    chk(contests > 50, $sformatf("both masters requested together %0d times", contests));
    chk(multi == 0, "at most one slave selected");
    for (int s = 0; s < 5; s++) for (int i = 0; i < 32; i++) chk(smem[s][i] == rmem[s][i], "final contents");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
