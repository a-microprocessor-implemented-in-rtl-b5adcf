// gpio -- 32-bit general-purpose IO.
//
// Registers (APB): 0x0 OUT (output values), 0x4 DIR (1 = pin driven),
// 0x8 IN (pin values through a two-flop synchronizer, read-only). The 32 pins
// are the chip's; the register set is this design's. Inputs appear in IN two
// cycles after they change.
module gpio
  import cimu_pkg::*;
#(
  parameter int WIDTH = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  apb_req_t         apb_req,
  output apb_rsp_t         apb_rsp,
  input  logic [WIDTH-1:0] gpio_i,
  output logic [WIDTH-1:0] gpio_o,
  output logic [WIDTH-1:0] gpio_oe
);
  logic [WIDTH-1:0] s1, s2;
  logic             wr;
  assign wr = apb_req.psel && apb_req.penable && apb_req.pwrite;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gpio_o <= '0; gpio_oe <= '0; s1 <= '0; s2 <= '0;
    end else begin
      s1 <= gpio_i; s2 <= s1;
      if (wr)
        case (apb_req.paddr[3:2])
          2'd0: gpio_o  <= apb_req.pwdata[WIDTH-1:0];
          2'd1: gpio_oe <= apb_req.pwdata[WIDTH-1:0];
          default: ;
        endcase
    end
  end

  always_comb begin
    apb_rsp.pready = 1'b1;
    apb_rsp.prdata = '0;
    case (apb_req.paddr[3:2])
      2'd0: apb_rsp.prdata[WIDTH-1:0] = gpio_o;
      2'd1: apb_rsp.prdata[WIDTH-1:0] = gpio_oe;
      2'd2: apb_rsp.prdata[WIDTH-1:0] = s2;
      default: ;
    endcase
  end
endmodule
