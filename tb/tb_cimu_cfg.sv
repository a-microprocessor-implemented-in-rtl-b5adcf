// tb_cimu_cfg -- checks the CIMU configuration registers over APB: every field
// written is read back and appears on the configuration outputs, per-column
// entries land in the right column, command bits give one-cycle pulses, and the
// done status is sticky until the next start.
module tb_cimu_cfg;
  import cimu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  apb_req_t req; apb_rsp_t rsp; cimu_cfg_t cfg; col_cfg_t ccfg [256];
  logic cs, cw, csh, ccl, busy, done; logic [31:0] cycles;
  int checks = 0, failures = 0;
  cimu_cfg dut (.clk, .rst_n, .apb_req(req), .apb_rsp(rsp), .cfg, .ccfg, .cmd_start(cs), .cmd_swap(cw),
                .cmd_shift(csh), .cmd_clear(ccl), .busy, .done, .cycles);
  int pulses [4] = '{0, 0, 0, 0};
  always @(posedge clk) begin
    if (rst_n && cs) pulses[0]++;
    if (rst_n && cw) pulses[1]++;
    if (rst_n && csh) pulses[2]++;
    if (rst_n && ccl) pulses[3]++;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask
  task automatic wr(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk); req = '{psel: 1, penable: 0, pwrite: 1, paddr: a, pwdata: d};
    @(negedge clk); req.penable = 1; @(negedge clk); req = '0;
  endtask
  task automatic rd(input logic [11:0] a, output logic [31:0] d);
    @(negedge clk); req = '{psel: 1, penable: 0, pwrite: 0, paddr: a, pwdata: 0};
    @(negedge clk); req.penable = 1; #1 d = rsp.prdata; @(negedge clk); req = '0;
  endtask
  initial begin
    logic [31:0] d;
    logic [26:0] colv [256];
    req = '0; busy = 0; done = 0; cycles = 32'd1234;
    repeat (2) @(posedge clk); rst_n = 1;
    wr(12'h004, 32'h000A_5371);
    chk(cfg.mode == MAC_AND && cfg.abn_en == 0 && cfg.relu_en == 0 && cfg.sparsity_en == 0, "mode bits");
    chk(cfg.bx == 4'd7 && cfg.ba == 4'd3 && cfg.row_bank_en == 4'h5 && cfg.col_bank_en == 4'hA, "mode fields");
    rd(12'h004, d); chk(d == 32'h000A_5371, "mode readback");
    wr(12'h008, 12'd1234); chk(cfg.n_elems == 12'd1234, "n");
    wr(12'h00C, 12'd256);  chk(cfg.adc_fs == 12'd256, "fs");
    wr(12'h010, 32'h0080_01F0); chk(cfg.global_offset == -9'sd16 && cfg.offset_gain == 8'd128, "offset");
    rd(12'h010, d); chk(d == 32'h0080_01F0, "offset readback");
    wr(12'h014, 9'd96); chk(cfg.conv_shift == 9'd96, "shift");
    rd(12'h018, d); chk(d == 32'd1234, "cycles");
    for (int m = 0; m < 256; m++) begin colv[m] = 27'($urandom); wr(12'h400 + 12'(4 * m), {5'd0, colv[m]}); end
    for (int m = 0; m < 256; m++) begin
      chk({ccfg[m].dac, ccfg[m].lexp, ccfg[m].lscale, ccfg[m].loff} == colv[m], $sformatf("column %0d", m));
      if (m % 37 == 0) begin rd(12'h400 + 12'(4 * m), d); chk(d[26:0] == colv[m], "column readback"); end
    end
    wr(12'h000, 32'h1); wr(12'h000, 32'h2); wr(12'h000, 32'h4); wr(12'h000, 32'h8);
    @(negedge clk);
    chk(pulses[0] == 1 && pulses[1] == 1 && pulses[2] == 1 && pulses[3] == 1, $sformatf("command pulses %0d %0d %0d %0d", pulses[0], pulses[1], pulses[2], pulses[3]));
    @(negedge clk); done = 1; @(negedge clk); done = 0; busy = 1;
    rd(12'h000, d); chk(d[1:0] == 2'b11, "status done+busy");
    wr(12'h000, 32'h1); busy = 0;
    rd(12'h000, d); chk(d[1:0] == 2'b00, "done cleared by start");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
