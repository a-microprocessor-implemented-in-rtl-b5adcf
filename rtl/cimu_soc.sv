// cimu_soc -- programmable in-memory-computing processor (top level).
//
// A RISC-V CPU, kept outside this RTL, drives two ports of this module: an
// instruction port wired straight to program memory and a data port on the
// system bus. The bus also carries the two-channel DMA and reaches program
// memory, data memory, the compute-in-memory unit (CIMU) data window, the APB
// bridge and the external-memory window, which leaves the chip as a bus port.
// The APB side holds the CIMU configuration registers, the DMA registers, the
// timer, the GPIO and the UART. After reset the bootloader copies the program
// from an external E2PROM into program memory and only then releases the CPU
// through cpu_rst_n; during boot it owns program memory's bus port.
//
// Address map (CPU and DMA):
//   0x0000_0000 program memory (128 kB)    0x1000_0000 data memory (128 kB)
//   0x2000_0000 CIMU data window           0x3000_0000 APB: +0x0000 CIMU cfg,
//   0x4000_0000 external memory                 +0x1000 DMA, +0x2000 timer,
//                                               +0x3000 GPIO, +0x4000 UART
// The block set and the 32-bit buses follow the chip; the bus protocol,
// address map and boot sequence are this design's.
// Lint notes: verilator reports s_rsp as circular (UNOPTFLAT) because it
// tracks the slave request and response arrays as whole signals; the real
// paths run master request -> bus -> slave -> response and contain no loop.
// The reset also feeds the bus-protocol assertion in sys_bus (SYNCASYNCNET);
// that use is for checking only and does not reach any logic.
module cimu_soc
  import cimu_pkg::*;
#(
  parameter int N_ROWS    = 2304,
  parameter int N_COLS    = 256,
  parameter int MEM_BYTES = 131072,
  parameter int BOOT_BYTES = 8192
) (
  input  logic        clk,
  input  logic        rst_n,
  // RISC-V CPU
  output logic        cpu_rst_n,
  input  bus_req_t    cpu_i_req,
  output bus_rsp_t    cpu_i_rsp,
  input  bus_req_t    cpu_d_req,
  output bus_rsp_t    cpu_d_rsp,
  output logic [2:0]  irq,          // {timer, DMA, CIMU done}
  // E2PROM
  output logic [12:0] e2p_addr,
  input  logic [7:0]  e2p_data,
  // external memory (DRAM controller)
  output bus_req_t    ext_req,
  input  bus_rsp_t    ext_rsp,
  // GPIO, UART, timer pin
  input  logic [31:0] gpio_i,
  output logic [31:0] gpio_o,
  output logic [31:0] gpio_oe,
  output logic        uart_tx,
  input  logic        uart_rx,
  output logic        timer_pin
);
  bus_req_t m_req [2];
  bus_rsp_t m_rsp [2];
  bus_req_t s_req [5];
  bus_rsp_t s_rsp [5];
  apb_req_t p_req [5];
  apb_rsp_t p_rsp [5];

  // ---- bootloader and program memory ----
  bus_req_t boot_req, pm_b_req;
  bus_rsp_t boot_rsp, pm_b_rsp;
  logic     boot_done;

  bootloader #(.N_BYTES(BOOT_BYTES)) u_boot (
    .clk, .rst_n, .e2p_addr, .e2p_data, .pm_req(boot_req), .pm_rsp(boot_rsp),
    .cpu_rst_n, .done(boot_done));

  always_comb begin
    pm_b_req = boot_done ? s_req[0] : boot_req;
    boot_rsp = boot_done ? '0 : pm_b_rsp;
    s_rsp[0] = boot_done ? pm_b_rsp : '0;
  end

  pmem #(.BYTES(MEM_BYTES)) u_pmem (
    .clk, .rst_n, .i_req(cpu_i_req), .i_rsp(cpu_i_rsp), .b_req(pm_b_req), .b_rsp(pm_b_rsp));

  dmem #(.BYTES(MEM_BYTES)) u_dmem (.clk, .rst_n, .req(s_req[1]), .rsp(s_rsp[1]));

  // ---- bus ----
  assign m_req[1]  = cpu_d_req;
  assign cpu_d_rsp = m_rsp[1];

  sys_bus u_bus (.clk, .rst_n, .m_req, .m_rsp, .s_req, .s_rsp);

  cimu #(.N_ROWS(N_ROWS), .N_COLS(N_COLS)) u_cimu (
    .clk, .rst_n, .apb_req(p_req[0]), .apb_rsp(p_rsp[0]),
    .bus_req(s_req[2]), .bus_rsp(s_rsp[2]), .irq_done(irq[0]));

  apb_bridge u_apb (.clk, .rst_n, .req(s_req[3]), .rsp(s_rsp[3]), .apb_req(p_req), .apb_rsp(p_rsp));

  assign ext_req  = s_req[4];
  assign s_rsp[4] = ext_rsp;

  // ---- peripherals ----
  dma u_dma (.clk, .rst_n, .apb_req(p_req[1]), .apb_rsp(p_rsp[1]), .m_req(m_req[0]),
             .m_rsp(m_rsp[0]), .irq(irq[1]));
  timer u_tmr (.clk, .rst_n, .apb_req(p_req[2]), .apb_rsp(p_rsp[2]), .irq(irq[2]), .pin(timer_pin));
  gpio u_gpio (.clk, .rst_n, .apb_req(p_req[3]), .apb_rsp(p_rsp[3]), .gpio_i, .gpio_o, .gpio_oe);
  uart u_uart (.clk, .rst_n, .apb_req(p_req[4]), .apb_rsp(p_rsp[4]), .tx(uart_tx), .rx(uart_rx));
endmodule
