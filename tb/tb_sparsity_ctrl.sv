// tb_sparsity_ctrl -- checks the sparsity / AND-logic controller at full size:
// four chunk loads fill the 2304-bit data and mask buffers, the x_n/xb_n pairs
// follow the XNOR, AND and masked encodings, gated row banks are held off, and
// the tally equals the number of unmasked rows in enabled banks.
module tb_sparsity_ctrl;
  import cimu_pkg::*;
  localparam int NR = 2304, RF = 288, CH = 72;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  mac_mode_e mode; logic [3:0] rbe; logic ld_en; logic [1:0] ld_chunk;
  logic [8*CH-1:0] ld_data, ld_mask; logic [NR-1:0] x_n, xb_n; logic [11:0] unmasked;
  int checks = 0, failures = 0;
  sparsity_ctrl dut (.clk, .rst_n, .mode, .row_bank_en(rbe), .ld_en, .ld_chunk, .ld_data, .ld_mask,
                     .x_n, .xb_n, .unmasked);
  logic d [NR], m [NR];
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    ld_en = 0; ld_chunk = 0; mode = MAC_XNOR; rbe = 4'hF;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      int u;
      mode = mac_mode_e'(t[0]);
      rbe  = (t >= 4) ? 4'(($urandom_range(1, 15))) : 4'hF;
      for (int n = 0; n < NR; n++) begin d[n] = $urandom_range(0, 1); m[n] = ($urandom_range(0, 4) == 0); end
      for (int c = 0; c < 4; c++) begin
        @(negedge clk); ld_en = 1; ld_chunk = 2'(c);
        for (int k = 0; k < 8; k++) for (int i = 0; i < CH; i++) begin
          ld_data[k*CH+i] = d[k*RF + c*CH + i];
          ld_mask[k*CH+i] = m[k*RF + c*CH + i];
        end
      end
      @(negedge clk); ld_en = 0;
      @(negedge clk);
      u = 0;
      for (int n = 0; n < NR; n++) begin
        bit off, ex, exb;
        off = m[n] || !rbe[n / 576];
        if (!off) u++;
        ex  = off ? 1'b1 : (mode == MAC_AND ? 1'b1 : d[n]);
        exb = off ? 1'b1 : !d[n];
        checks++;
        if (x_n[n] != ex || xb_n[n] != exb) begin failures++; if (failures < 10) $display("FAIL t%0d n%0d", t, n); end
      end
      checks++; if (unmasked != 12'(u)) begin failures++; $display("FAIL tally %0d exp %0d", unmasked, u); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
