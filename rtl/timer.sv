// timer -- scheduling timer.
//
// A 32-bit counter that, when enabled, counts clock cycles up to COMPARE and
// then restarts from 0, setting a sticky match flag and pulsing irq; pin
// toggles on every match so that it gives a square wave of period
// 2*(COMPARE+1) cycles. Registers (APB): 0x0 CTRL (bit0 enable), 0x4 COUNT,
// 0x8 COMPARE, 0xC STATUS (bit0 match; write 1 to clear). The chip only names
// its timers; this behaviour is this design's.
module timer
  import cimu_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  apb_req_t apb_req,
  output apb_rsp_t apb_rsp,
  output logic     irq,
  output logic     pin
);
  logic        en, match;
  logic [31:0] count, compare;
  logic        wr;
  assign wr = apb_req.psel && apb_req.penable && apb_req.pwrite;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      en <= 1'b0; match <= 1'b0; count <= '0; compare <= '1; irq <= 1'b0; pin <= 1'b0;
    end else begin
      irq <= 1'b0;
      if (en) begin
        if (count == compare) begin
          count <= '0; match <= 1'b1; irq <= 1'b1; pin <= ~pin;
        end else count <= count + 1;
      end
      if (wr)
        case (apb_req.paddr[3:2])
          2'd0: en <= apb_req.pwdata[0];
          2'd1: count <= apb_req.pwdata;
          2'd2: compare <= apb_req.pwdata;
          default: if (apb_req.pwdata[0]) match <= 1'b0;
        endcase
    end
  end

  always_comb begin
    apb_rsp.pready = 1'b1;
    case (apb_req.paddr[3:2])
      2'd0: apb_rsp.prdata = {31'd0, en};
      2'd1: apb_rsp.prdata = count;
      2'd2: apb_rsp.prdata = compare;
      default: apb_rsp.prdata = {31'd0, match};
    endcase
  end
endmodule
