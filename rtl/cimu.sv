// cimu -- compute-in-memory unit: bit-scalable matrix-vector multiplier.
//
// Computes y = A x for a matrix A of up to 256 x 2304 one-bit cells and an
// input vector x of up to 2304 elements. Matrix elements of Ba bits occupy Ba
// adjacent columns (bit-parallel), input elements of Bx bits are fed one
// bit-plane at a time (bit-serial). For every bit-plane the array computes, in
// every column at once, the charge-domain sum of the bit-wise XNOR or AND of
// the plane with the stored bits; each column is digitised by an 8-b ADC (and
// binarized by an ABN comparator); 32 near-memory datapaths, each shared by 8
// columns, scale, shift and accumulate the digitised sums into multi-bit
// results.
//
// Blocks: w2b_buffer (input reshaping, double-buffered) -> sparsity_ctrl
// (bit-plane and mask buffers, x_n/xb_n drive) -> cima (array) -> sar_adc and
// abn per column -> near_mem_dp per 8 columns. mem_rw_if and row_decoder load
// the matrix, cimu_cfg holds the configuration, cimu_seq runs the bit-planes.
// The sparsity tally enters the datapaths as part of the global offset:
//   goff = sat9(global_offset - ((unmasked * offset_gain) >> 8)),
// which lets an XNOR-mode computation subtract half of the participating rows
// (offset_gain = 128) so that masked rows count as zero; this use of the tally
// is this design's choice.
//
// Data port (simplified bus, byte offsets in the unit's window):
//   0x00000-0x3FFFF  write: packed input words into the fill bank
//   0x40000-0x7FFFF  read/write: matrix words, word index = row*24 + word
//   0x80000-0xBFFFF  read: result word w. With ABN output, bit i of word w is
//                    column 32w+i. Otherwise result r comes from datapath
//                    r / (8/Ba), entry r % (8/Ba); 16-bit results are packed two
//                    per word (result 2w in the low half) when Bx+Ba <= 5.
// Config port: APB, see cimu_cfg. Results are valid from the done pulse (status
// bit) until the next start.
module cimu
  import cimu_pkg::*;
#(
  parameter int N_ROWS    = 2304,
  parameter int N_COLS    = 256,
  parameter int C_CIMA    = 50,
  parameter int C_ADC     = 20,
  parameter int C_RDWR    = 20
) (
  input  logic     clk,
  input  logic     rst_n,
  input  apb_req_t apb_req,
  output apb_rsp_t apb_rsp,
  input  bus_req_t bus_req,
  output bus_rsp_t bus_rsp,
  output logic     irq_done
);
  localparam int WL_ROWS  = N_ROWS / 3;
  localparam int ROW_BITS = N_COLS * 3;
  localparam int AW       = $clog2(WL_ROWS);
  localparam int N_DP     = N_COLS / WAYS;
  localparam int RF_N     = N_ROWS / N_RF;
  localparam int CHUNK    = RF_N / 4;

  cimu_cfg_t cfg;
  col_cfg_t  ccfg [N_COLS];
  logic      cmd_start, cmd_swap, cmd_shift, cmd_clear;
  logic      busy, done;
  logic [31:0] cycles;

  cimu_cfg #(.N_COLS(N_COLS)) u_cfg (
    .clk, .rst_n, .apb_req, .apb_rsp, .cfg, .ccfg,
    .cmd_start, .cmd_swap, .cmd_shift, .cmd_clear, .busy, .done, .cycles);

  // ---------------- data port decode ----------------
  logic [1:0] region;
  assign region = bus_req.addr[19:18];

  bus_req_t a_req;
  bus_rsp_t a_rsp;
  always_comb begin
    a_req = bus_req;
    a_req.valid = bus_req.valid && region == 2'd1;
    a_req.addr  = {14'd0, bus_req.addr[17:0]};
  end

  // ---------------- input path ----------------
  logic [2:0]  plane;
  logic [1:0]  chunk;
  logic        ld_en;
  logic [11:0] wr_count;
  logic [N_RF*CHUNK-1:0] rd_data, rd_mask;

  w2b_buffer #(.N_ROWS(N_ROWS)) u_w2b (
    .clk, .rst_n, .bx(cfg.bx), .n_elems(cfg.n_elems), .sparsity_en(cfg.sparsity_en),
    .conv_shift(cfg.conv_shift),
    .wr_valid(bus_req.valid && bus_req.we && region == 2'd0), .wr_data(bus_req.wdata),
    .cmd_swap, .cmd_clear, .cmd_shift, .wr_count,
    .rd_plane(plane), .rd_chunk(chunk), .rd_data, .rd_mask);

  logic [N_ROWS-1:0] x_n, xb_n;
  logic [11:0]       unmasked;

  sparsity_ctrl #(.N_ROWS(N_ROWS)) u_sp (
    .clk, .rst_n, .mode(cfg.mode), .row_bank_en(cfg.row_bank_en),
    .ld_en, .ld_chunk(chunk), .ld_data(rd_data), .ld_mask(rd_mask),
    .x_n, .xb_n, .unmasked);

  // ---------------- array ----------------
  logic [AW-1:0]       row_addr;
  logic                row_en, row_we;
  logic [ROW_BITS-1:0] row_wdata, row_rdata;
  logic [WL_ROWS-1:0]  wl;

  mem_rw_if #(.ROW_BITS(ROW_BITS), .WL_ROWS(WL_ROWS), .C_RDWR(C_RDWR)) u_mif (
    .clk, .rst_n, .req(a_req), .rsp(a_rsp), .row_addr, .row_en, .row_we,
    .row_wdata, .row_rdata);

  row_decoder #(.ROWS(WL_ROWS)) u_dec (.addr(row_addr), .en(row_en), .wl);

  logic        cima_start, cima_done, cima_busy;
  logic [11:0] level [N_COLS];
  logic [11:0] ncap;

  cima #(.N_ROWS(N_ROWS), .N_COLS(N_COLS), .C_CIMA(C_CIMA)) u_cima (
    .clk, .rst_n, .wl, .we(row_we), .wdata(row_wdata), .rdata(row_rdata),
    .x_n, .xb_n, .row_bank_en(cfg.row_bank_en), .col_bank_en(cfg.col_bank_en),
    .start(cima_start), .busy(cima_busy), .done(cima_done), .level, .ncap);

  // ---------------- converters ----------------
  logic       conv_start;
  logic [7:0] code [N_COLS];
  logic       abn_o [N_COLS];
  logic [N_COLS-1:0] adc_done, abn_done, adc_busy;

  for (genvar m = 0; m < N_COLS; m++) begin : g_col
    sar_adc #(.C_ADC(C_ADC)) u_adc (
      .clk, .rst_n, .start(conv_start), .level(level[m]), .fs(cfg.adc_fs),
      .code(code[m]), .busy(adc_busy[m]), .done(adc_done[m]));
    abn #(.C_ABN(C_ADC)) u_abn (
      .clk, .rst_n, .start(conv_start), .level(level[m]), .ncap,
      .dac(ccfg[m].dac), .out(abn_o[m]), .done(abn_done[m]));
  end

  // ---------------- near-memory datapaths ----------------
  logic signed [8:0] goff;
  always_comb begin
    logic signed [22:0] t;
    t = 23'(cfg.global_offset) - 23'((32'(unmasked) * 32'(cfg.offset_gain)) >> 8);
    if (t > 23'sd255) goff = 9'sd255;
    else if (t < -23'sd256) goff = -9'sd256;
    else goff = 9'(t);
  end

  logic        dp_start, dp_first;
  logic [N_DP-1:0] dp_done;
  logic [31:0] result [N_DP][WAYS];
  logic [WAYS-1:0] abn_q [N_DP];
  logic        o16;
  assign o16 = out16(cfg.bx, cfg.ba);

  for (genvar d = 0; d < N_DP; d++) begin : g_dp
    logic [7:0] adc_w [WAYS];
    logic       abn_w [WAYS];
    col_cfg_t   cc_w  [WAYS];
    logic       busy_w;
    for (genvar i = 0; i < WAYS; i++) begin : g_w
      assign adc_w[i] = code[d*WAYS + i];
      assign abn_w[i] = abn_o[d*WAYS + i];
      assign cc_w[i]  = ccfg[d*WAYS + i];
    end
    near_mem_dp #(.WAYS(WAYS)) u_dp (
      .clk, .rst_n, .start(dp_start), .first_plane(dp_first), .gexp({1'b0, plane}),
      .ba(cfg.ba), .goff, .adc(adc_w), .abn_bit(abn_w), .ccfg(cc_w),
      .relu_en(cfg.relu_en), .out16_en(o16), .busy(busy_w), .done(dp_done[d]),
      .result(result[d]), .abn_q(abn_q[d]));
  end

  cimu_seq u_seq (
    .clk, .rst_n, .start(cmd_start), .bx(cfg.bx), .busy, .done,
    .plane, .chunk, .ld_en, .cima_start, .cima_done, .conv_start,
    .conv_done(adc_done[0]), .dp_start, .dp_first, .dp_done(dp_done[0]), .cycles);

  assign irq_done = done;

  // ---------------- result readout ----------------
  function automatic logic [31:0] res(input int unsigned r);
    int unsigned per, b;
    b   = (cfg.ba == 0) ? 1 : 32'(cfg.ba);
    per = WAYS / b;
    if (per == 0) per = 1;
    if (r / per >= N_DP) return '0;
    return result[r / per][r % per];
  endfunction

  logic [31:0] y_word;
  always_comb begin
    int unsigned w;
    w = 32'(bus_req.addr[17:2]);
    y_word = '0;
    if (cfg.abn_en) begin
      for (int i = 0; i < 32; i++)
        if (w*32 + i < N_COLS) y_word[i] = abn_q[(w*32 + i) / WAYS][(w*32 + i) % WAYS];
    end else if (o16) begin
      y_word = {res(2*w + 1)[15:0], res(2*w)[15:0]};
    end else begin
      y_word = res(w);
    end
  end

  always_comb begin
    bus_rsp = '0;
    case (region)
      2'd0: begin bus_rsp.ready = bus_req.valid; bus_rsp.rdata = {20'd0, wr_count}; end
      2'd1: bus_rsp = a_rsp;
      2'd2: begin bus_rsp.ready = bus_req.valid; bus_rsp.rdata = y_word; end
      default: bus_rsp.ready = bus_req.valid;
    endcase
  end
endmodule
