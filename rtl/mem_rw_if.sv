// mem_rw_if -- matrix load/read interface of the compute-in-memory array.
//
// The matrix A is written into the array one 768-bit physical row at a time
// from 32-bit bus words. A local buffer of WORDS = ROW_BITS/32 words (24 at
// full size) collects a row; writing its last word starts the row write, which
// occupies the array for C_RDWR = 20 cycles. A read of any word of a row that is
// not in the buffer first fetches the whole row (C_RDWR cycles) and then answers
// from the buffer. The row-buffer principle, the 768-b rows, the 24 words per
// row and the 20-cycle access are the chip's; the word addressing
// (word index = row*WORDS + word) and the stall behaviour are this design's.
//
// Bus: req.addr is a byte offset inside the matrix window. The slave answers
// with rsp.ready (rdata valid in that cycle). While a row access is in
// progress, requests wait. row_en/row_we pulse in the last cycle of an access;
// row_rdata is sampled in that cycle.
module mem_rw_if
  import cimu_pkg::*;
#(
  parameter int ROW_BITS = 768,
  parameter int WL_ROWS  = 768,
  parameter int C_RDWR   = 20,
  parameter int WORDS    = ROW_BITS / 32,
  parameter int AW       = $clog2(WL_ROWS)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  bus_req_t            req,
  output bus_rsp_t            rsp,
  output logic [AW-1:0]       row_addr,
  output logic                row_en,
  output logic                row_we,
  output logic [ROW_BITS-1:0] row_wdata,
  input  logic [ROW_BITS-1:0] row_rdata
);
  logic [31:0]   buf_q [WORDS];
  logic [AW-1:0] buf_row;
  logic          buf_valid;
  logic          busy, busy_we;
  int unsigned   cnt;

  logic [29:0]   widx;
  logic [AW-1:0] row;
  int unsigned   w;

  assign widx = req.addr[31:2];
  assign row  = AW'(widx / 30'(WORDS));
  assign w    = 32'(widx % 30'(WORDS));

  always_comb begin
    for (int i = 0; i < WORDS; i++) row_wdata[i*32 +: 32] = buf_q[i];
    row_addr = buf_row;
    row_en   = busy && (cnt == C_RDWR - 1);
    row_we   = row_en && busy_we;
    rsp      = '0;
    if (req.valid && !busy) begin
      if (req.we) rsp.ready = 1'b1;
      else if (buf_valid && buf_row == row) begin
        rsp.ready = 1'b1;
        rsp.rdata = buf_q[w];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_row <= '0; buf_valid <= 1'b0; busy <= 1'b0; busy_we <= 1'b0; cnt <= 0;
      for (int i = 0; i < WORDS; i++) buf_q[i] <= '0;
    end else if (busy) begin
      cnt <= cnt + 1;
      if (cnt == C_RDWR - 1) begin
        busy <= 1'b0;
        buf_valid <= 1'b1;
        if (!busy_we)
          for (int i = 0; i < WORDS; i++) buf_q[i] <= row_rdata[i*32 +: 32];
      end
    end else if (req.valid) begin
      if (req.we) begin
        for (int b = 0; b < 4; b++)
          if (req.be[b]) buf_q[w][b*8 +: 8] <= req.wdata[b*8 +: 8];
        if (buf_row != row) buf_valid <= 1'b0;
        if (w == WORDS - 1) begin
          buf_row <= row; busy <= 1'b1; busy_we <= 1'b1; cnt <= 0; buf_valid <= 1'b0;
        end
      end else if (!(buf_valid && buf_row == row)) begin
        buf_row <= row; busy <= 1'b1; busy_we <= 1'b0; cnt <= 0; buf_valid <= 1'b0;
      end
    end
  end
endmodule
