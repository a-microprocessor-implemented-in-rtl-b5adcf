// pmem -- 128 kB program memory with an instruction port and a bus port.
//
// 32768 words of 32 bits. Port I serves the CPU's instruction fetches
// (read-only), port B the system bus and, during boot, the bootloader. Both
// ports follow the simplified bus handshake: a read is answered with ready one
// cycle after valid (synchronous SRAM read), a write is accepted at once with
// byte enables. The 128 kB size is the chip's; the two-port organisation and
// the timing are this design's.
module pmem
  import cimu_pkg::*;
#(
  parameter int BYTES = 131072,
  parameter int WORDS = BYTES / 4,
  parameter int AW    = $clog2(WORDS)
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t i_req,
  output bus_rsp_t i_rsp,
  input  bus_req_t b_req,
  output bus_rsp_t b_rsp
);
  logic [31:0] mem [WORDS];
  logic        i_pend, b_pend;
  logic [31:0] i_q, b_q;

  assign i_rsp = '{ready: i_pend, rdata: i_q};
  assign b_rsp = '{ready: b_req.valid && (b_req.we || b_pend), rdata: b_q};

  always_ff @(posedge clk) begin
    i_q <= mem[AW'(i_req.addr[31:2])];
    b_q <= mem[AW'(b_req.addr[31:2])];
    if (b_req.valid && b_req.we)
      for (int b = 0; b < 4; b++)
        if (b_req.be[b]) mem[AW'(b_req.addr[31:2])][b*8 +: 8] <= b_req.wdata[b*8 +: 8];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_pend <= 1'b0; b_pend <= 1'b0;
    end else begin
      i_pend <= i_req.valid && !i_pend;
      b_pend <= b_req.valid && !b_req.we && !b_pend;
    end
  end
endmodule
