// tb_cimu_soc -- end-to-end test of the processor at its full size (2304 x 256
// array, 128 kB memories, 8 kB boot image).
//
// The testbench plays the parts that live outside the RTL: an E2PROM holding a
// random boot image, the RISC-V CPU (a bus-functional model on the instruction
// and data ports), an external memory with wait states, and loopbacks on the
// UART and GPIO pins. The sequence is:
//   boot      the bootloader copies the image and releases cpu_rst_n; the CPU
//             model fetches every instruction word and compares it;
//   matrix    the CPU writes the matrix rows used by the layer into data
//             memory, DMA channel 0 copies them into the CIMU matrix window
//             while the CPU keeps using data memory (bus contention, and the
//             CIMU row-write stalls); the CPU reads rows back;
//   compute   input vectors are staged in data memory and sent by DMA channel
//             1 to the fixed CIMU input address, then the CIMU runs
//               AND 4b/4b (a Network-A style layer, 32-bit results),
//               XNOR 2b/1b with zero inputs masked (16-bit results),
//               AND 1b/1b with ABN output (a Network-B style binarized layer),
//               a convolution shift reusing the previous input vector;
//             every result is compared with an integer reference;
//   periph    timer interrupts, GPIO out/in, UART transmit/receive, external
//             memory writes and reads.
// Only the first NUSE = 96 input rows take part (N = 96); the others are
// masked by the element count, so only their matrix rows need loading and the
// ADC full scale of 256 keeps every conversion exact. Each mechanism has a
// counter; a mechanism that never happened counts as a failure at the end.
module tb_cimu_soc;
  import cimu_pkg::*;
  localparam int NR = 2304, NC = 256, WPR = NC * 3 / 32, NDP = NC / 8, RF = NR / 8;
  localparam int BOOT = 8192, NUSE = 96;
  localparam logic [31:0] DMEM = 32'h1000_0000, CIMU = 32'h2000_0000, APB = 32'h3000_0000,
                          EXT = 32'h4000_0000;
  localparam logic [31:0] A_CFG = APB, A_DMA = APB + 32'h1000, A_TMR = APB + 32'h2000,
                          A_GPIO = APB + 32'h3000, A_UART = APB + 32'h4000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        cpu_rst_n;
  bus_req_t    ireq, dreq, ext_req;
  bus_rsp_t    irsp, drsp, ext_rsp;
  logic [2:0]  irq;
  logic [12:0] e2p_addr;
  logic [7:0]  e2p_data;
  logic [31:0] gpio_i, gpio_o, gpio_oe;
  logic        uart_tx, timer_pin;

  cimu_soc dut (.clk, .rst_n, .cpu_rst_n, .cpu_i_req(ireq), .cpu_i_rsp(irsp),
    .cpu_d_req(dreq), .cpu_d_rsp(drsp), .irq, .e2p_addr, .e2p_data, .ext_req, .ext_rsp,
    .gpio_i, .gpio_o, .gpio_oe, .uart_tx, .uart_rx(uart_tx), .timer_pin);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- E2PROM and external memory ----------------
  logic [7:0] rom [BOOT];
  assign e2p_data = rom[e2p_addr];

  logic [31:0] xmem [256];
  int          xwait = 0;
  always_comb begin
    ext_rsp.ready = ext_req.valid && xwait == 2;
    ext_rsp.rdata = xmem[ext_req.addr[9:2]];
  end
  always @(posedge clk) begin
    if (ext_req.valid && ext_rsp.ready) begin
      if (ext_req.we) xmem[ext_req.addr[9:2]] <= ext_req.wdata;
      xwait <= 0;
    end else if (ext_req.valid) xwait <= xwait + 1;
  end

  // ---------------- mechanism counters ----------------
  int n_boot = 0, n_fetch = 0, n_dma_words = 0, n_contend = 0, n_row_stall = 0;
  int n_and = 0, n_xnor_sp = 0, n_abn = 0, n_shift = 0, n16 = 0, n32 = 0;
  int n_irq_cimu = 0, n_irq_dma = 0, n_irq_tmr = 0, n_gpio = 0, n_uart = 0, n_ext = 0;
  logic [2:0] irq_q = '0;
  always @(posedge clk) begin
    irq_q <= irq;
    if (rst_n) begin
      if (irq[0] && !irq_q[0]) n_irq_cimu++;
      if (irq[1] && !irq_q[1]) n_irq_dma++;
      if (irq[2] && !irq_q[2]) n_irq_tmr++;
      if (dut.m_req[0].valid && dut.m_rsp[0].ready) n_dma_words++;
      if (dut.m_req[0].valid && dreq.valid && !drsp.ready) n_contend++;
      if (dut.s_req[2].valid && !dut.s_rsp[2].ready && dut.s_req[2].addr[19:18] == 2'd1) n_row_stall++;
    end
  end

  // ---------------- CPU bus-functional model ----------------
  task automatic cpu_xfer(input logic we, input logic [31:0] a, input logic [31:0] wd,
                          output logic [31:0] rd);
    @(negedge clk);
    dreq = '{valid: 1'b1, we: we, addr: a, wdata: wd, be: 4'hF};
    do @(posedge clk); while (!drsp.ready);
    rd = drsp.rdata;
    @(negedge clk);
    dreq = '0;
  endtask
  task automatic wr(input logic [31:0] a, input logic [31:0] d);
    logic [31:0] x;
    cpu_xfer(1'b1, a, d, x);
  endtask
  task automatic rd(input logic [31:0] a, output logic [31:0] d);
    cpu_xfer(1'b0, a, '0, d);
  endtask
  task automatic fetch(input logic [31:0] a, output logic [31:0] d);
    @(negedge clk);
    ireq = '{valid: 1'b1, we: 1'b0, addr: a, wdata: '0, be: 4'hF};
    do @(posedge clk); while (!irsp.ready);
    d = irsp.rdata;
    @(negedge clk);
    ireq = '0;
  endtask

  // DMA channel c: copy n words, waiting for its done bit
  task automatic dma_copy(input int c, input logic [31:0] src, input logic [31:0] dst,
                          input int n, input bit dst_fix);
    wr(A_DMA + 32'(16 * c), src);
    wr(A_DMA + 32'(16 * c) + 4, dst);
    wr(A_DMA + 32'(16 * c) + 8, n);
    wr(A_DMA + 32'(16 * c) + 12, {29'd0, dst_fix, 1'b0, 1'b1});
  endtask
  task automatic dma_wait(input int c);
    logic [31:0] s;
    do rd(A_DMA + 32'h20, s); while (s[c]);
    check(s[2 + c], $sformatf("dma channel %0d done", c));
  endtask

  // ---------------- reference state ----------------
  bit         w [NUSE][NC];
  logic [7:0] x [NR];

  function automatic logic [31:0] mword(input int r, input int k);
    logic [31:0] d;
    for (int i = 0; i < 32; i++) begin
      int b;
      b = 32 * k + i;
      d[i] = w[3 * r + b / NC][b % NC];
    end
    return d;
  endfunction

  // stage a vector of NUSE elements in data memory, DMA it into the CIMU
  task automatic send_vector(input int bx, input logic [31:0] stage);
    int per, i, nw;
    logic [31:0] d;
    per = 8 / bx; i = 0; nw = 0;
    while (i < NUSE) begin
      d = '0;
      for (int by = 0; by < 4; by++)
        for (int e = 0; e < per; e++)
          if (i < NUSE) begin
            d[by*8 +: 8] |= (x[i] & 8'((1 << bx) - 1)) << (e * bx);
            i++;
          end
      wr(stage + 32'(4 * nw), d);
      nw++;
    end
    wr(A_CFG + 32'h004, {24'd0, 4'(bx), 4'd0});
    wr(A_CFG + 32'h000, 32'h8);                 // restart filling
    dma_copy(1, stage, CIMU, nw, 1'b1);
    dma_wait(1);
    rd(CIMU, d);
    check(d == NUSE, $sformatf("CIMU received %0d elements", d));
    wr(A_CFG + 32'h000, 32'h2);                 // swap banks
  endtask

  task automatic new_vector(input int bx, input bit andm, input bit sp);
    int u;
    u = 0;
    for (int n = 0; n < NR; n++) begin
      x[n] = 8'($urandom_range(0, (1 << bx) - 1));
      if (n < NUSE && !(sp && x[n] == 0)) u++;
    end
    if (!andm && (u % 2) == 1)
      for (int n = 0; n < NUSE; n++)
        if (x[n] != 0) begin x[n] = 0; break; end
  endtask

  function automatic int xval(input logic [7:0] c, input int bx, input bit andm, input bit sp,
                              input int n, input int nel);
    int v;
    if (n >= nel || (sp && c == 0)) return 0;
    v = 0;
    for (int b = 0; b < bx; b++)
      v += andm ? (int'(c[b]) << b) : ((2 * int'(c[b]) - 1) << b);
    return v;
  endfunction

  function automatic int aval(input int n, input int col0, input int ba, input bit andm);
    int v;
    v = 0;
    for (int k = 0; k < ba; k++)
      if (andm) v += (k == ba - 1 && ba > 1) ? -(int'(w[n][col0+k]) << k) : (int'(w[n][col0+k]) << k);
      else v += (2 * int'(w[n][col0+k]) - 1) << k;
    return v;
  endfunction

  // configure the layer, start, wait for the interrupt, compare every result
  task automatic mvm(input bit andm, input int bx, input int ba, input int nel, input bit sp,
                     input string tag);
    logic [31:0] d;
    int per, m, nwords, irq_seen;
    bit o16;
    wr(A_CFG + 32'h004, {12'd0, 4'hF, 4'h1, 4'(ba), 4'(bx), sp, 1'b0, 1'b0, andm});
    wr(A_CFG + 32'h008, nel);
    wr(A_CFG + 32'h00C, 256);
    wr(A_CFG + 32'h010, andm ? 32'd0 : {8'd0, 8'd128, 16'd0});
    for (int c = 0; c < NC; c++) begin
      int k;
      logic signed [7:0] sc;
      k  = (c % 8) % ba;
      sc = andm ? ((k == ba - 1 && ba > 1) ? -8'sd1 : 8'sd1) : 8'sd2;
      wr(A_CFG + 32'h400 + 32'(4 * c), {5'd0, 6'd0, 4'(k), sc, 9'd0});
    end
    irq_seen = n_irq_cimu;
    wr(A_CFG + 32'h000, 32'h1);
    while (n_irq_cimu == irq_seen) @(posedge clk);
    rd(A_CFG + 32'h018, d);
    check(d == 32'(1 + 86 * bx), $sformatf("%s cycles %0d", tag, d));
    per = 8 / ba; m = NDP * per;
    o16 = (bx + ba) <= 5;
    if (o16) n16++; else n32++;
    nwords = o16 ? (m + 1) / 2 : m;
    for (int wd = 0; wd < nwords; wd++) begin
      rd(CIMU + 32'h8_0000 + 32'(4 * wd), d);
      for (int h = 0; h < (o16 ? 2 : 1); h++) begin
        int r, col0, y;
        r = o16 ? 2 * wd + h : wd;
        if (r < m) begin
          col0 = (r / per) * 8 + (r % per) * ba;
          y = 0;
          for (int n = 0; n < nel; n++) y += xval(x[n], bx, andm, sp, n, nel) * aval(n, col0, ba, andm);
          if (o16) check($signed(d[16*h +: 16]) == y, $sformatf("%s y[%0d] = %0d expected %0d", tag, r, $signed(d[16*h +: 16]), y));
          else check($signed(d) == y, $sformatf("%s y[%0d] = %0d expected %0d", tag, r, $signed(d), y));
        end
      end
    end
  endtask

  initial begin
    logic [31:0] d;
    ireq = '0; dreq = '0; gpio_i = '0;
    for (int i = 0; i < BOOT; i++) rom[i] = 8'($urandom);
    for (int i = 0; i < 256; i++) xmem[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- boot ----
    check(cpu_rst_n == 1'b0, "CPU held in reset during boot");
    while (!cpu_rst_n) @(posedge clk);
    n_boot++;
    begin
      int bad;
      bad = 0;
      for (int a = 0; a < BOOT; a += 4) begin
        fetch(32'(a), d);
        if (d != {rom[a+3], rom[a+2], rom[a+1], rom[a]}) bad++;
        n_fetch++;
      end
      check(bad == 0, $sformatf("%0d boot words differ", bad));
    end

    // ---- matrix: data memory -> DMA -> CIMU, with CPU traffic alongside ----
    for (int n = 0; n < NUSE; n++) for (int c = 0; c < NC; c++) w[n][c] = bit'($urandom_range(0, 1));
    for (int r = 0; r < NUSE / 3; r++)
      for (int k = 0; k < WPR; k++) wr(DMEM + 32'(4 * (r * WPR + k)), mword(r, k));
    dma_copy(0, DMEM, CIMU + 32'h4_0000, NUSE / 3 * WPR, 1'b0);
    begin
      int bad;
      bad = 0;
      for (int i = 0; i < 200; i++) begin
        wr(DMEM + 32'h8000 + 32'(4 * i), 32'(i) * 32'h0101_0101);
        rd(DMEM + 32'h8000 + 32'(4 * i), d);
        if (d != 32'(i) * 32'h0101_0101) bad++;
      end
      check(bad == 0, "CPU data memory traffic during DMA");
    end
    dma_wait(0);
    for (int r = 0; r < NUSE / 3; r += 7)
      for (int k = 0; k < WPR; k += 5) begin
        rd(CIMU + 32'h4_0000 + 32'(4 * (r * WPR + k)), d);
        check(d == mword(r, k), $sformatf("matrix readback row %0d word %0d", r, k));
      end

    // ---- AND 4b/4b (32-bit results) ----
    new_vector(4, 1'b1, 1'b0);
    send_vector(4, DMEM + 32'h1_0000);
    mvm(1'b1, 4, 4, NUSE, 1'b0, "and4x4"); n_and++;

    // ---- XNOR 2b/1b with zero inputs masked (16-bit results) ----
    new_vector(2, 1'b0, 1'b1);
    send_vector(2, DMEM + 32'h1_0000);
    mvm(1'b0, 2, 1, NUSE, 1'b1, "xnor2x1sp"); n_xnor_sp++;

    // ---- convolution shift: drop 4 entries per register file ----
    begin
      logic [7:0] old [NR];
      new_vector(2, 1'b1, 1'b0);
      send_vector(2, DMEM + 32'h1_0000);
      mvm(1'b1, 2, 2, NUSE, 1'b0, "preshift");
      for (int n = 0; n < NR; n++) old[n] = x[n];
      wr(A_CFG + 32'h014, 4);
      wr(A_CFG + 32'h000, 32'h4);
      for (int k = 0; k < 8; k++)
        for (int j = 0; j < RF - 4; j++) x[k*RF + j] = old[k*RF + j + 4];
      // the four new entries of each register file: 32 elements, 2 words
      wr(CIMU, 32'h0);
      wr(CIMU, 32'h0);
      rd(CIMU, d);
      check(d == 32, $sformatf("tail elements %0d", d));
      wr(A_CFG + 32'h000, 32'h2);
      mvm(1'b1, 2, 2, NUSE - 4, 1'b0, "shifted"); n_shift++;
    end

    // ---- AND 1b/1b with ABN output (binarized layer) ----
    begin
      int dac [NC];
      new_vector(1, 1'b1, 1'b0);
      send_vector(1, DMEM + 32'h1_0000);
      wr(A_CFG + 32'h004, {12'd0, 4'hF, 4'h1, 4'd1, 4'd1, 1'b0, 1'b0, 1'b1, 1'b1});
      wr(A_CFG + 32'h008, NUSE);
      wr(A_CFG + 32'h00C, 256);
      for (int c = 0; c < NC; c++) begin
        dac[c] = $urandom_range(1, 3);
        wr(A_CFG + 32'h400 + 32'(4 * c), {5'd0, 6'(dac[c]), 4'd0, 8'sd1, 9'd0});
      end
      begin
        int irq_seen;
        irq_seen = n_irq_cimu;
        wr(A_CFG + 32'h000, 32'h1);
        while (n_irq_cimu == irq_seen) @(posedge clk);
      end
      for (int wd = 0; wd < NC / 32; wd++) begin
        rd(CIMU + 32'h8_0000 + 32'(4 * wd), d);
        for (int i = 0; i < 32; i++) begin
          int c, cnt;
          c = 32 * wd + i;
          cnt = 0;
          for (int n = 0; n < NUSE; n++) cnt += int'(x[n][0] & w[n][c]);
          check(d[i] == (cnt * 64 > dac[c] * (NR / 4)), $sformatf("abn col %0d count %0d dac %0d", c, cnt, dac[c]));
        end
      end
      n_abn++;
    end

    // ---- timer ----
    wr(A_TMR + 32'h8, 99);
    wr(A_TMR + 32'h4, 0);
    wr(A_TMR + 32'h0, 1);
    repeat (450) @(posedge clk);
    wr(A_TMR + 32'h0, 0);
    check(n_irq_tmr >= 3 && n_irq_tmr <= 5, $sformatf("timer interrupts %0d", n_irq_tmr));

    // ---- GPIO ----
    for (int t = 0; t < 4; t++) begin
      logic [31:0] v;
      v = $urandom;
      wr(A_GPIO + 32'h0, v);
      wr(A_GPIO + 32'h4, ~v);
      check(gpio_o == v && gpio_oe == ~v, "gpio outputs");
      gpio_i = ~v;
      repeat (3) @(posedge clk);
      rd(A_GPIO + 32'h8, d);
      check(d == ~v, "gpio inputs");
      n_gpio++;
    end

    // ---- UART (tx looped back to rx) ----
    wr(A_UART + 32'h8, 8);
    for (int t = 0; t < 3; t++) begin
      logic [7:0] b;
      b = 8'($urandom);
      wr(A_UART + 32'h0, {24'd0, b});
      do rd(A_UART + 32'h4, d); while (!d[1]);
      rd(A_UART + 32'h0, d);
      check(d[7:0] == b, $sformatf("uart byte %h expected %h", d[7:0], b));
      n_uart++;
    end

    // ---- external memory ----
    for (int i = 0; i < 16; i++) wr(EXT + 32'(4 * i), 32'hA5A5_0000 + 32'(i));
    for (int i = 0; i < 16; i++) begin
      rd(EXT + 32'(4 * i), d);
      check(d == 32'hA5A5_0000 + 32'(i), "external memory");
      n_ext++;
    end

    // ---- every mechanism must have happened ----
    check(n_boot > 0,       "mechanism: boot from E2PROM");
    check(n_fetch > 0,      "mechanism: instruction fetch");
    check(n_dma_words > 0,  "mechanism: DMA transfers");
    check(n_contend > 0,    "mechanism: bus contention DMA vs CPU");
    check(n_row_stall > 0,  "mechanism: CIMU row-write stall");
    check(n_and > 0,        "mechanism: AND multi-bit MVM");
    check(n_xnor_sp > 0,    "mechanism: XNOR with sparsity masking");
    check(n_abn > 0,        "mechanism: ABN binarized output");
    check(n_shift > 0,      "mechanism: convolution shift");
    check(n16 > 0,          "mechanism: 16-bit outputs");
    check(n32 > 0,          "mechanism: 32-bit outputs");
    check(n_irq_cimu > 0,   "mechanism: CIMU done interrupt");
    check(n_irq_dma > 0,    "mechanism: DMA interrupt");
    check(n_irq_tmr > 0,    "mechanism: timer interrupt");
    check(n_gpio > 0,       "mechanism: GPIO");
    check(n_uart > 0,       "mechanism: UART");
    check(n_ext > 0,        "mechanism: external memory");
    $display("mechanisms: boot=%0d fetch=%0d dma_words=%0d contend=%0d row_stall=%0d and=%0d xnor_sp=%0d abn=%0d shift=%0d o16=%0d o32=%0d irq_cimu=%0d irq_dma=%0d irq_tmr=%0d gpio=%0d uart=%0d ext=%0d",
             n_boot, n_fetch, n_dma_words, n_contend, n_row_stall, n_and, n_xnor_sp, n_abn, n_shift,
             n16, n32, n_irq_cimu, n_irq_dma, n_irq_tmr, n_gpio, n_uart, n_ext);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
