// cimu_cfg -- configuration registers of the compute-in-memory unit (APB slave).
//
// Register map (byte offsets on the 12-bit APB address; this map is this
// design's own, the chip only names "Config. Regs."):
//   0x000 CMD    write: bit0 start an MVM, bit1 swap input banks,
//                bit2 convolution shift, bit3 restart input filling
//                read : bit0 busy, bit1 done (sticky, cleared by start)
//   0x004 MODE   bit0 AND mode (0: XNOR), bit1 ABN output, bit2 ReLU,
//                bit3 sparsity, [7:4] Bx, [11:8] Ba, [15:12] row-bank enables,
//                [19:16] column-bank enables
//   0x008 N      [11:0] valid input elements
//   0x00C ADC_FS [11:0] ADC full scale in charged capacitors
//   0x010 OFFSET [8:0] global offset (signed), [23:16] tally gain (/256)
//   0x014 SHIFT  [8:0] convolution shift per register file
//   0x018 CYCLES read-only: cycles taken by the last MVM
//   0x400 + 4*m  column m: [8:0] local offset, [16:9] local scale,
//                [20:17] local exponent, [26:21] ABN DAC code
// Every access completes in its APB access phase (pready = 1). Command bits
// produce one-cycle pulses on the cmd_* outputs.
module cimu_cfg
  import cimu_pkg::*;
#(
  parameter int N_COLS = 256
) (
  input  logic      clk,
  input  logic      rst_n,
  input  apb_req_t  apb_req,
  output apb_rsp_t  apb_rsp,
  output cimu_cfg_t cfg,
  output col_cfg_t  ccfg [N_COLS],
  output logic      cmd_start,
  output logic      cmd_swap,
  output logic      cmd_shift,
  output logic      cmd_clear,
  input  logic      busy,
  input  logic      done,
  input  logic [31:0] cycles
);
  logic wr, done_q;
  assign wr = apb_req.psel && apb_req.penable && apb_req.pwrite;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg <= '{mode: MAC_XNOR, bx: 4'd1, ba: 4'd1, row_bank_en: 4'hF, col_bank_en: 4'hF,
               n_elems: 12'(N_COLS * 9), adc_fs: 12'(N_COLS * 9), default: '0};
      for (int m = 0; m < N_COLS; m++) ccfg[m] <= '{lscale: 8'sd1, default: '0};
      cmd_start <= 1'b0; cmd_swap <= 1'b0; cmd_shift <= 1'b0; cmd_clear <= 1'b0;
      done_q <= 1'b0;
    end else begin
      cmd_start <= 1'b0; cmd_swap <= 1'b0; cmd_shift <= 1'b0; cmd_clear <= 1'b0;
      if (done) done_q <= 1'b1;
      if (wr) begin
        if (apb_req.paddr[10]) begin
          int unsigned m;
          m = 32'(apb_req.paddr[9:2]);
          if (m < N_COLS)
            ccfg[m] <= '{loff: apb_req.pwdata[8:0], lscale: apb_req.pwdata[16:9],
                         lexp: apb_req.pwdata[20:17], dac: apb_req.pwdata[26:21]};
        end else begin
          case (apb_req.paddr[9:2])
            8'h00: begin
              cmd_start <= apb_req.pwdata[0];
              cmd_swap  <= apb_req.pwdata[1];
              cmd_shift <= apb_req.pwdata[2];
              cmd_clear <= apb_req.pwdata[3];
              if (apb_req.pwdata[0]) done_q <= 1'b0;
            end
            8'h01: begin
              cfg.mode        <= mac_mode_e'(apb_req.pwdata[0]);
              cfg.abn_en      <= apb_req.pwdata[1];
              cfg.relu_en     <= apb_req.pwdata[2];
              cfg.sparsity_en <= apb_req.pwdata[3];
              cfg.bx          <= apb_req.pwdata[7:4];
              cfg.ba          <= apb_req.pwdata[11:8];
              cfg.row_bank_en <= apb_req.pwdata[15:12];
              cfg.col_bank_en <= apb_req.pwdata[19:16];
            end
            8'h02: cfg.n_elems <= apb_req.pwdata[11:0];
            8'h03: cfg.adc_fs  <= apb_req.pwdata[11:0];
            8'h04: begin
              cfg.global_offset <= apb_req.pwdata[8:0];
              cfg.offset_gain   <= apb_req.pwdata[23:16];
            end
            8'h05: cfg.conv_shift <= apb_req.pwdata[8:0];
            default: ;
          endcase
        end
      end
    end
  end

  always_comb begin
    apb_rsp.pready = 1'b1;
    apb_rsp.prdata = '0;
    if (apb_req.paddr[10]) begin
      int unsigned m;
      m = 32'(apb_req.paddr[9:2]);
      if (m < N_COLS)
        apb_rsp.prdata = {5'd0, ccfg[m].dac, ccfg[m].lexp, ccfg[m].lscale, ccfg[m].loff};
    end else begin
      case (apb_req.paddr[9:2])
        8'h00: apb_rsp.prdata = {30'd0, done_q, busy};
        8'h01: apb_rsp.prdata = {12'd0, cfg.col_bank_en, cfg.row_bank_en, cfg.ba, cfg.bx,
                                 cfg.sparsity_en, cfg.relu_en, cfg.abn_en, cfg.mode};
        8'h02: apb_rsp.prdata = {20'd0, cfg.n_elems};
        8'h03: apb_rsp.prdata = {20'd0, cfg.adc_fs};
        8'h04: apb_rsp.prdata = {8'd0, cfg.offset_gain, 7'd0, cfg.global_offset};
        8'h05: apb_rsp.prdata = {23'd0, cfg.conv_shift};
        8'h06: apb_rsp.prdata = cycles;
        default: ;
      endcase
    end
  end
endmodule
