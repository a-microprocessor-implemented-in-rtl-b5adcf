// bootloader -- copies the program from an external E2PROM into program memory.
//
// After reset the bootloader holds the CPU in reset, reads N_BYTES bytes from a
// parallel E2PROM (13-bit address, 8-bit data; each byte is taken WAIT cycles
// after its address is driven), packs them little-endian into 32-bit words and
// writes the words to program memory from address 0. It then releases the CPU
// (cpu_rst_n high) and stays done. The 13-bit address and 8-bit data buses are
// the chip's; the access timing and the image size are this design's.
module bootloader
  import cimu_pkg::*;
#(
  parameter int N_BYTES = 8192,
  parameter int WAIT    = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic [12:0] e2p_addr,
  input  logic [7:0]  e2p_data,
  output bus_req_t    pm_req,
  input  bus_rsp_t    pm_rsp,
  output logic        cpu_rst_n,
  output logic        done
);
  typedef enum logic [1:0] {B_READ, B_WRITE, B_DONE} bstate_e;
  bstate_e     st;
  logic [13:0] a;
  int unsigned cnt;
  logic [31:0] word;

  assign e2p_addr  = a[12:0];
  assign done      = (st == B_DONE);
  assign cpu_rst_n = done;

  always_comb begin
    pm_req = '0;
    if (st == B_WRITE) begin
      pm_req.valid = 1'b1;
      pm_req.we    = 1'b1;
      pm_req.addr  = {18'd0, a[13:2], 2'b00} - 32'd4;
      pm_req.wdata = word;
      pm_req.be    = 4'hF;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= B_READ; a <= '0; cnt <= 0; word <= '0;
    end else case (st)
      B_READ: begin
        if (cnt == WAIT - 1) begin
          cnt <= 0;
          word[8*a[1:0] +: 8] <= e2p_data;
          a <= a + 1;
          if (a[1:0] == 2'd3) st <= B_WRITE;
        end else cnt <= cnt + 1;
      end
      B_WRITE: if (pm_rsp.ready) st <= (32'(a) >= N_BYTES) ? B_DONE : B_READ;
      default: ;
    endcase
  end
endmodule
