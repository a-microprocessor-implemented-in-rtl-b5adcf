// tb_w2b_buffer -- checks the reshaping buffer at full size (2304 elements):
// packing of 1..8-bit elements, bit-plane readout in 4 chunks of 8 x 72 bits,
// mask bits for padding and zero elements, double buffering (writes to the fill
// bank leave the compute bank unchanged) and the convolution shift.
module tb_w2b_buffer;
  localparam int NR = 2304, RF = 288, CH = 72;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0] bx; logic [11:0] n_elems; logic sp; logic [8:0] shift;
  logic wr_valid; logic [31:0] wr_data; logic cmd_swap, cmd_clear, cmd_shift;
  logic [11:0] wr_count; logic [2:0] plane; logic [1:0] chunk;
  logic [8*CH-1:0] rd_data, rd_mask;
  int checks = 0, failures = 0;
  w2b_buffer dut (.clk, .rst_n, .bx, .n_elems, .sparsity_en(sp), .conv_shift(shift), .wr_valid, .wr_data,
                  .cmd_swap, .cmd_clear, .cmd_shift, .wr_count, .rd_plane(plane), .rd_chunk(chunk),
                  .rd_data, .rd_mask);
  logic [7:0] x [NR];
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic send(input logic [7:0] q [$], input int b);
    int i, per; per = 8 / b; i = 0;
    while (i < q.size()) begin
      logic [31:0] d; d = '0;
      for (int by = 0; by < 4; by++) for (int e = 0; e < per; e++)
        if (i < q.size()) begin d[by*8 +: 8] |= q[i] << (e * b); i++; end
      @(negedge clk); wr_valid = 1; wr_data = d; @(negedge clk); wr_valid = 0;
    end
  endtask
  task automatic pulse(input int which);
    @(negedge clk); cmd_swap = which == 0; cmd_clear = which == 1; cmd_shift = which == 2;
    @(negedge clk); cmd_swap = 0; cmd_clear = 0; cmd_shift = 0;
  endtask
  task automatic compare(input int b, input string tag);
    for (int p = 0; p < b; p++)
      for (int c = 0; c < 4; c++) begin
        @(negedge clk); plane = 3'(p); chunk = 2'(c); #1;
        for (int k = 0; k < 8; k++) for (int i = 0; i < CH; i++) begin
          int n; bit em;
          n = k * RF + c * CH + i;
          em = (n >= int'(n_elems)) || (sp && x[n] == 0);
          checks += 2;
          if (rd_data[k*CH+i] != x[n][p]) begin failures++; if (failures < 10) $display("FAIL %s data n=%0d p=%0d", tag, n, p); end
          if (rd_mask[k*CH+i] != em) begin failures++; if (failures < 10) $display("FAIL %s mask n=%0d", tag, n); end
        end
      end
  endtask
  initial begin
    int bl [4] = '{1, 3, 4, 8};
    wr_valid = 0; cmd_swap = 0; cmd_clear = 0; cmd_shift = 0; plane = 0; chunk = 0; shift = 0;
    n_elems = 12'd2304; sp = 0; bx = 1;
    repeat (2) @(posedge clk); rst_n = 1;
    foreach (bl[t]) begin
      logic [7:0] q [$];
      q = {};
      bx = 4'(bl[t]); sp = t[0]; n_elems = 12'(2304 - 100 * t);
      for (int n = 0; n < NR; n++) begin x[n] = 8'($urandom_range(0, (1 << bl[t]) - 1)); q.push_back(x[n]); end
      pulse(1); send(q, bl[t]);
      checks++; if (wr_count != 12'd2304) begin failures++; $display("FAIL count %0d", wr_count); end
      pulse(0);
      // scribble into the new fill bank: must not disturb the compute bank
      send('{8'h1, 8'h1, 8'h1}, 1);
      compare(bl[t], $sformatf("bx%0d", bl[t]));
    end
    // convolution shift by 96 entries per file with 2-bit elements
    begin
      logic [7:0] q [$], old [NR];
      bx = 2; sp = 0; n_elems = 12'd2304;
      for (int n = 0; n < NR; n++) begin x[n] = 8'($urandom_range(0, 3)); q.push_back(x[n]); end
      pulse(1); send(q, 2); pulse(0);
      compare(2, "preshift");
      old = x; q = {};
      shift = 9'd96; pulse(2);
      for (int k = 0; k < 8; k++) for (int j = 0; j < RF; j++)
        if (j < RF - 96) x[k*RF+j] = old[k*RF+j+96];
        else begin x[k*RF+j] = 8'($urandom_range(0, 3)); q.push_back(x[k*RF+j]); end
      send(q, 2);
      checks++; if (wr_count != 12'd768) begin failures++; $display("FAIL shift count %0d", wr_count); end
      pulse(0);
      compare(2, "shift1");
      // a second shift accumulates the rotation
      old = x; q = {};
      shift = 9'd250; pulse(2);
      for (int k = 0; k < 8; k++) for (int j = 0; j < RF; j++)
        if (j < RF - 250) x[k*RF+j] = old[k*RF+j+250];
        else begin x[k*RF+j] = 8'($urandom_range(0, 3)); q.push_back(x[k*RF+j]); end
      send(q, 2); pulse(0);
      compare(2, "shift2");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
