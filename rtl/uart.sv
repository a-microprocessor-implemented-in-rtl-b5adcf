// uart -- serial link to the host PC.
//
// 8 data bits, no parity, one stop bit, LSB first, DIV clock cycles per bit.
// Registers (APB): 0x0 DATA (write: send a byte if the transmitter is idle;
// read: last received byte, clears rx valid), 0x4 STATUS (bit0 tx busy,
// bit1 rx valid), 0x8 DIV. The receiver samples each bit in its middle after
// detecting the start bit on a two-flop synchronized input. The chip only names
// its UART; this behaviour is this design's.
module uart
  import cimu_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  apb_req_t apb_req,
  output apb_rsp_t apb_rsp,
  output logic     tx,
  input  logic     rx
);
  logic [15:0] div;
  logic        wr, rd_data;
  // transmitter
  logic [9:0]  tsh;
  logic [3:0]  tbits;
  logic [15:0] tcnt;
  // receiver
  logic        r1, r2, rbusy, rvalid;
  logic [7:0]  rsh, rbyte;
  logic [3:0]  rbits;
  logic [15:0] rcnt;

  assign wr      = apb_req.psel && apb_req.penable && apb_req.pwrite;
  assign rd_data = apb_req.psel && apb_req.penable && !apb_req.pwrite && apb_req.paddr[3:2] == 2'd0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div <= 16'd16; tsh <= '1; tbits <= '0; tcnt <= '0; tx <= 1'b1;
      r1 <= 1'b1; r2 <= 1'b1; rbusy <= 1'b0; rvalid <= 1'b0; rsh <= '0; rbyte <= '0;
      rbits <= '0; rcnt <= '0;
    end else begin
      // ---- transmit ----
      if (tbits != 0) begin
        if (tcnt == div - 1) begin
          tcnt <= '0; tsh <= {1'b1, tsh[9:1]}; tx <= tsh[1]; tbits <= tbits - 1;
          if (tbits == 1) tx <= 1'b1;
        end else tcnt <= tcnt + 1;
      end
      if (wr && apb_req.paddr[3:2] == 2'd0 && tbits == 0) begin
        tsh <= {1'b1, apb_req.pwdata[7:0], 1'b0}; tx <= 1'b0; tbits <= 4'd10; tcnt <= '0;
      end
      if (wr && apb_req.paddr[3:2] == 2'd2) div <= apb_req.pwdata[15:0];
      // ---- receive ----
      r1 <= rx; r2 <= r1;
      if (rd_data) rvalid <= 1'b0;
      if (!rbusy) begin
        if (!r2) begin rbusy <= 1'b1; rcnt <= '0; rbits <= '0; end
      end else begin
        if ((rbits == 0 && rcnt == (div >> 1)) || (rbits != 0 && rcnt == div - 1)) begin
          rcnt <= '0;
          rbits <= rbits + 1;
          if (rbits == 0) begin
            if (r2) rbusy <= 1'b0;                 // false start
          end else if (rbits <= 8) rsh <= {r2, rsh[7:1]};
          else begin
            rbusy <= 1'b0;
            if (r2) begin rbyte <= rsh; rvalid <= 1'b1; end
          end
        end else rcnt <= rcnt + 1;
      end
    end
  end

  always_comb begin
    apb_rsp.pready = 1'b1;
    case (apb_req.paddr[3:2])
      2'd0: apb_rsp.prdata = {24'd0, rbyte};
      2'd1: apb_rsp.prdata = {30'd0, rvalid, tbits != 0};
      2'd2: apb_rsp.prdata = {16'd0, div};
      default: apb_rsp.prdata = '0;
    endcase
  end
endmodule
