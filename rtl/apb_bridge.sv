// apb_bridge -- system-bus to APB bridge for the configuration registers.
//
// A bus transfer in the APB window becomes one APB transfer: a setup cycle
// (psel=1, penable=0) and access cycles (penable=1) until the selected slave
// gives pready; the bus then sees ready, with prdata for reads. Address bits
// [15:12] choose the slave (0 CIMU configuration, 1 DMA, 2 timer, 3 GPIO,
// 4 UART); bits [11:0] are the register address. Other slaves answer 0.
// The chip has an APB peripheral bus bridged from its AXI bus; the map and
// protocol details are this design's.
module apb_bridge
  import cimu_pkg::*;
#(
  parameter int NS = 5
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t req,
  output bus_rsp_t rsp,
  output apb_req_t apb_req [NS],
  input  apb_rsp_t apb_rsp [NS]
);
  typedef enum logic [1:0] {A_IDLE, A_SETUP, A_ACCESS, A_DONE} astate_e;
  astate_e st;
  int unsigned sel;
  assign sel = 32'(req.addr[15:12]);

  always_comb begin
    for (int s = 0; s < NS; s++) begin
      apb_req[s].psel    = (st == A_SETUP || st == A_ACCESS) && sel == s;
      apb_req[s].penable = (st == A_ACCESS) && sel == s;
      apb_req[s].pwrite  = req.we;
      apb_req[s].paddr   = req.addr[11:0];
      apb_req[s].pwdata  = req.wdata;
    end
    rsp = '0;
    if (st == A_ACCESS) begin
      if (sel < NS) begin
        rsp.ready = apb_rsp[sel].pready;
        rsp.rdata = apb_rsp[sel].prdata;
      end else rsp.ready = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) st <= A_IDLE;
    else case (st)
      A_IDLE:   if (req.valid) st <= A_SETUP;
      A_SETUP:  st <= A_ACCESS;
      A_ACCESS: if (rsp.ready) st <= A_DONE;
      default:  st <= A_IDLE;   // one idle cycle lets the master drop valid
    endcase
  end
endmodule
