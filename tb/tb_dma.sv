// tb_dma -- checks the DMA controller against a memory model on its bus port
// that answers after a random number of wait cycles. Both channels copy
// random blocks at once (incrementing and fixed destination); the memory
// contents, the status bits, the interrupt count and the read/write order on
// the bus are checked.
module tb_dma;
  import cimu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  apb_req_t req; apb_rsp_t rsp; bus_req_t m_req; bus_rsp_t m_rsp; logic irq;
  dma dut (.clk, .rst_n, .apb_req(req), .apb_rsp(rsp), .m_req, .m_rsp, .irq);
  `include "tb_apb_periph.svh"

  // memory model: 4096 words at word address addr[13:2]
  logic [31:0] mem [4096];
  int wait_left = 0, irqs = 0, fixed_writes = 0;
  logic [31:0] fixed_last;
  always @(posedge clk) if (rst_n && irq) irqs++;
  always @(negedge clk) begin
    m_rsp = '0;
    if (m_req.valid) begin
      if (wait_left == 0) begin
        m_rsp.ready = 1'b1;
        m_rsp.rdata = mem[m_req.addr[13:2]];
      end
    end
  end
  always @(posedge clk) begin
    if (m_req.valid && m_rsp.ready) begin
      if (m_req.we) begin
        mem[m_req.addr[13:2]] <= m_req.wdata;
        if (m_req.addr[13:2] == 12'hF00) begin fixed_writes++; fixed_last = m_req.wdata; end
      end
      wait_left <= $urandom_range(0, 3);
    end else if (m_req.valid && wait_left > 0) wait_left <= wait_left - 1;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [31:0] d, ref_mem [4096];
    req = '0;
    for (int i = 0; i < 4096; i++) begin mem[i] = $urandom; ref_mem[i] = mem[i]; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      int n0, n1, s0, d0, s1;
      n0 = $urandom_range(1, 60); n1 = $urandom_range(1, 60);
      s0 = 64 * t; d0 = 1024 + 64 * t; s1 = 512 + 64 * t;
      fixed_writes = 0;
      apb_wr(12'h00, 32'(s0 * 4)); apb_wr(12'h04, 32'(d0 * 4)); apb_wr(12'h08, 32'(n0));
      apb_wr(12'h10, 32'(s1 * 4)); apb_wr(12'h14, 32'hF00 * 4); apb_wr(12'h18, 32'(n1));
      apb_wr(12'h0C, 1); apb_wr(12'h1C, 32'h5);
      apb_rd(12'h1C, d); chk(d == 32'h4, "ctrl readback: dst fixed");
      apb_rd(12'h20, d); chk(d[1:0] != 0, "busy while copying");
      do apb_rd(12'h20, d); while (d[1:0] != 0);
      chk(d[3:2] == 2'b11, "both done");
      for (int i = 0; i < n0; i++) chk(mem[d0 + i] == ref_mem[s0 + i], $sformatf("ch0 word %0d", i));
      for (int i = 0; i < n0; i++) ref_mem[d0 + i] = ref_mem[s0 + i];
      chk(fixed_writes == n1, $sformatf("ch1 fixed writes %0d/%0d", fixed_writes, n1));
      chk(fixed_last == ref_mem[s1 + n1 - 1], "ch1 last word");
      ref_mem[12'hF00] = fixed_last;
      apb_rd(12'h08, d); chk(d == 0, "len counted down");
      apb_rd(12'h14, d); chk(d == 32'hF00 * 4, "fixed dst unchanged");
    end
    chk(irqs >= 4 && irqs <= 8, $sformatf("irq count %0d", irqs));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
