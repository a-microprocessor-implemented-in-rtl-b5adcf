// sys_bus -- system interconnect (stands in for the chip's 32-bit AXI bus).
//
// Two masters (0: DMA, 1: CPU data port) share one path to five slaves chosen
// by address:
//   0x0000_0000 - 0x0FFF_FFFF  program memory
//   0x1000_0000 - 0x1FFF_FFFF  data memory
//   0x2000_0000 - 0x2FFF_FFFF  CIMU data port
//   0x3000_0000 - 0x3FFF_FFFF  APB bridge
//   0x4000_0000 - 0xFFFF_FFFF  external memory
// Arbitration is fixed priority (DMA first); a master that has been granted
// keeps the bus until its slave answers ready. Slaves see the full address.
// The chip's bus is AXI; the simplified valid/ready protocol, the map and the
// arbitration are this design's. Requests and responses pass combinationally.
module sys_bus
  import cimu_pkg::*;
#(
  parameter int NM = 2,
  parameter int NS = 5
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t m_req [NM],
  output bus_rsp_t m_rsp [NM],
  output bus_req_t s_req [NS],
  input  bus_rsp_t s_rsp [NS]
);
  logic        locked;
  int unsigned owner_q, owner;
  int unsigned sel;

  function automatic int unsigned decode(input logic [31:0] a);
    if (a[31:28] >= 4'h4) return 4;
    return 32'(a[29:28]);
  endfunction

  always_comb begin
    owner = 0;
    if (locked) owner = owner_q;
    else
      for (int m = NM - 1; m >= 0; m--)
        if (m_req[m].valid) owner = m;
    sel = decode(m_req[owner].addr);
    for (int s = 0; s < NS; s++) begin
      s_req[s] = m_req[owner];
      s_req[s].valid = m_req[owner].valid && (sel == s);
    end
    for (int m = 0; m < NM; m++) begin
      m_rsp[m] = '0;
      if (m == owner && sel < NS) m_rsp[m] = s_rsp[sel];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= 1'b0; owner_q <= 0;
    end else begin
      locked  <= m_req[owner].valid && !m_rsp[owner].ready;
      owner_q <= owner;
    end
  end

  // a granted master must hold its request until ready
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (m_req[owner].valid && !m_rsp[owner].ready) |=> m_req[owner_q].valid;
  endproperty
  assert property (p_hold);
endmodule
