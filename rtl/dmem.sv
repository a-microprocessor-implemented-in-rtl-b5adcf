// dmem -- 128 kB data memory on the system bus.
//
// 32768 words of 32 bits with byte enables. A read is answered with ready one
// cycle after valid (synchronous SRAM read); a write is accepted at once. The
// 128 kB size is the chip's; the single bus port and the timing are this
// design's.
module dmem
  import cimu_pkg::*;
#(
  parameter int BYTES = 131072,
  parameter int WORDS = BYTES / 4,
  parameter int AW    = $clog2(WORDS)
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t req,
  output bus_rsp_t rsp
);
  logic [31:0] mem [WORDS];
  logic        pend;
  logic [31:0] q;

  assign rsp = '{ready: req.valid && (req.we || pend), rdata: q};

  always_ff @(posedge clk) begin
    q <= mem[AW'(req.addr[31:2])];
    if (req.valid && req.we)
      for (int b = 0; b < 4; b++)
        if (req.be[b]) mem[AW'(req.addr[31:2])][b*8 +: 8] <= req.wdata[b*8 +: 8];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pend <= 1'b0;
    else        pend <= req.valid && !req.we && !pend;
  end
endmodule
