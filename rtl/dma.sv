// dma -- two-channel DMA controller.
//
// Each channel copies LEN 32-bit words from SRC to DST over the system bus, as
// a read followed by a write per word, incrementing each address by 4 unless
// its fixed flag is set (a fixed address suits the CIMU's input window). When
// both channels are active they take turns word by word. Registers (APB,
// channel c at 0x10*c): 0x0 SRC, 0x4 DST, 0x8 LEN, 0xC CTRL (write bit0 start,
// bit1 SRC fixed, bit2 DST fixed); 0x20 STATUS (bit c: channel c busy,
// bit 2+c: channel c done, sticky, cleared by its start). irq pulses when a
// channel finishes. The two channels are the chip's; everything else is this
// design's.
module dma
  import cimu_pkg::*;
#(
  parameter int CH = 2
) (
  input  logic     clk,
  input  logic     rst_n,
  input  apb_req_t apb_req,
  output apb_rsp_t apb_rsp,
  output bus_req_t m_req,
  input  bus_rsp_t m_rsp,
  output logic     irq
);
  typedef struct packed {
    logic [31:0] src, dst, len;
    logic        src_fix, dst_fix, busy, done;
  } chan_t;

  chan_t       ch [CH];
  logic        phase;      // 0: read, 1: write
  logic        active;     // a word transfer is under way
  int unsigned cur;
  logic [31:0] data;
  logic        wr;

  assign wr = apb_req.psel && apb_req.penable && apb_req.pwrite;

  always_comb begin
    m_req = '0;
    if (active) begin
      m_req.valid = 1'b1;
      m_req.we    = phase;
      m_req.addr  = phase ? ch[cur].dst : ch[cur].src;
      m_req.wdata = data;
      m_req.be    = 4'hF;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < CH; c++) ch[c] <= '0;
      phase <= 1'b0; active <= 1'b0; cur <= 0; data <= '0; irq <= 1'b0;
    end else begin
      irq <= 1'b0;
      if (wr && apb_req.paddr[5:4] < 2'(CH)) begin
        int unsigned c;
        c = 32'(apb_req.paddr[5:4]);
        case (apb_req.paddr[3:2])
          2'd0: ch[c].src <= apb_req.pwdata;
          2'd1: ch[c].dst <= apb_req.pwdata;
          2'd2: ch[c].len <= apb_req.pwdata;
          default: begin
            ch[c].src_fix <= apb_req.pwdata[1];
            ch[c].dst_fix <= apb_req.pwdata[2];
            if (apb_req.pwdata[0]) begin
              ch[c].busy <= 1'b1;
              ch[c].done <= 1'b0;
            end
          end
        endcase
      end
      if (!active) begin
        // pick the next busy channel after the current one
        logic found;
        found = 1'b0;
        for (int k = 1; k <= CH; k++) begin
          int unsigned c;
          c = (cur + 32'(k)) % CH;
          if (!found && ch[c].busy && ch[c].len != 0) begin
            found = 1'b1;
            cur  <= c;
          end
        end
        active <= found;
        for (int c = 0; c < CH; c++)
          if (ch[c].busy && ch[c].len == 0) begin
            ch[c].busy <= 1'b0; ch[c].done <= 1'b1; irq <= 1'b1;
          end
        phase <= 1'b0;
      end else if (m_rsp.ready) begin
        if (!phase) begin
          data  <= m_rsp.rdata;
          phase <= 1'b1;
        end else begin
          if (!ch[cur].src_fix) ch[cur].src <= ch[cur].src + 4;
          if (!ch[cur].dst_fix) ch[cur].dst <= ch[cur].dst + 4;
          ch[cur].len <= ch[cur].len - 1;
          phase  <= 1'b0;
          active <= 1'b0;
        end
      end
    end
  end

  always_comb begin
    apb_rsp.pready = 1'b1;
    apb_rsp.prdata = '0;
    if (apb_req.paddr[5]) begin
      for (int c = 0; c < CH; c++) begin
        apb_rsp.prdata[c]     = ch[c].busy;
        apb_rsp.prdata[2 + c] = ch[c].done;
      end
    end else if (apb_req.paddr[5:4] < 2'(CH)) begin
      case (apb_req.paddr[3:2])
        2'd0: apb_rsp.prdata = ch[apb_req.paddr[4]].src;
        2'd1: apb_rsp.prdata = ch[apb_req.paddr[4]].dst;
        2'd2: apb_rsp.prdata = ch[apb_req.paddr[4]].len;
        default: apb_rsp.prdata = {29'd0, ch[apb_req.paddr[4]].dst_fix, ch[apb_req.paddr[4]].src_fix, 1'b0};
      endcase
    end
  end
endmodule
