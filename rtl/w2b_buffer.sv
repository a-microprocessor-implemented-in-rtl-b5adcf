// w2b_buffer -- word-to-bit reshaping buffer for the input vector x.
//
// Input elements of Bx = 1..8 bits arrive packed in 32-bit words: each byte
// carries floor(8/Bx) elements in its low bits, first element lowest, so with
// Bx = 1 a full 2304-element vector takes 72 words. Elements are unpacked into
// one of two banks (double buffering): the host fills one bank while the array
// is fed from the other. Element n lives in register file n / RF_N (8 files of
// RF_N = 288 entries at full size), entry n % RF_N.
//
// Readout is bit-serial: for a bit-plane and a chunk index (0..3), every
// register file delivers CHUNK = RF_N/4 bits (72 at full size) of that plane,
// together with each element's mask bit. The mask is 1 for padding elements
// (index >= N) and, when sparsity is enabled, for elements whose value is zero.
//
// Convolution striding: cmd_shift copies the compute bank into the fill bank and
// rotates its per-file addressing by conv_shift entries (a barrel rotator on the
// readout), so that the oldest conv_shift elements of every file drop out and
// only the new tail elements need to be loaded. Writes after cmd_shift fill
// entries RF_N-conv_shift..RF_N-1 of file 0, then of file 1, and so on.
// cmd_swap exchanges the banks and restarts filling at element 0; cmd_clear
// restarts filling of the fill bank at element 0.
//
// The byte-segment packing, 8 files, 72-bit readout and circular shift for
// striding follow the chip. Unpacking each word on arrival (instead of a
// 24-word staging buffer) and the exact packing rules are this design's choices.
// All commands and writes take effect at the clock edge; readout is combinational.
module w2b_buffer #(
  parameter int N_ROWS = 2304,
  parameter int N_RF   = 8,
  parameter int RF_N   = N_ROWS / N_RF,
  parameter int CHUNK  = RF_N / 4,
  parameter int RW     = $clog2(RF_N + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [3:0]          bx,
  input  logic [11:0]         n_elems,
  input  logic                sparsity_en,
  input  logic [8:0]          conv_shift,
  // host side
  input  logic                wr_valid,
  input  logic [31:0]         wr_data,
  input  logic                cmd_swap,
  input  logic                cmd_clear,
  input  logic                cmd_shift,
  output logic [11:0]         wr_count,    // elements written since the last command
  // array side
  input  logic [2:0]          rd_plane,
  input  logic [1:0]          rd_chunk,
  output logic [N_RF*CHUNK-1:0] rd_data,
  output logic [N_RF*CHUNK-1:0] rd_mask
);
  logic [7:0]    mem [2][N_ROWS];
  logic [RW-1:0] rot [2];
  logic          fill;          // bank being filled; the other one feeds the array
  logic [RW-1:0] jstart;        // first entry written in every file
  logic [3:0]    kptr;          // register file being filled
  logic [RW-1:0] jptr;          // logical entry being filled

  // ---- unpacking of one word into element positions ----
  int unsigned per_byte;
  always_comb per_byte = (bx == 0) ? 1 : 8 / 32'(bx);

  logic [7:0] emask;
  always_comb emask = (bx >= 8 || bx == 0) ? 8'hFF : 8'((32'd1 << bx) - 1);

  // ---- write side ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill <= 1'b0; kptr <= '0; jptr <= '0; jstart <= '0; wr_count <= '0;
      rot[0] <= '0; rot[1] <= '0;
      for (int b = 0; b < 2; b++)
        for (int n = 0; n < N_ROWS; n++) mem[b][n] <= '0;
    end else if (cmd_swap) begin
      fill <= ~fill; kptr <= '0; jptr <= '0; jstart <= '0; wr_count <= '0;
    end else if (cmd_clear) begin
      kptr <= '0; jptr <= '0; jstart <= '0; wr_count <= '0;
    end else if (cmd_shift) begin
      logic [RW:0] r;
      for (int n = 0; n < N_ROWS; n++) mem[fill][n] <= mem[~fill][n];
      r = {1'b0, rot[~fill]} + (RW+1)'(conv_shift);
      if (r >= (RW+1)'(RF_N)) r = r - (RW+1)'(RF_N);
      rot[fill] <= RW'(r);
      kptr     <= '0;
      jstart   <= RW'(RF_N) - RW'(conv_shift);
      jptr     <= RW'(RF_N) - RW'(conv_shift);
      wr_count <= '0;
    end else if (wr_valid) begin
      logic [3:0]    k;
      logic [RW-1:0] j;
      logic [RW:0]   p;
      logic [11:0]   c;
      k = kptr; j = jptr; c = wr_count;
      for (int by = 0; by < 4; by++)
        for (int e = 0; e < 8; e++)
          if (e < per_byte && 32'(k) < N_RF) begin
            p = {1'b0, j} + {1'b0, rot[fill]};
            if (p >= (RW+1)'(RF_N)) p = p - (RW+1)'(RF_N);
            mem[fill][32'(k) * RF_N + 32'(p)] <= (wr_data[by*8 +: 8] >> (32'(e) * 32'(bx))) & emask;
            c = c + 1;
            if (32'(j) == RF_N - 1) begin
              j = jstart;
              k = k + 1;
            end else j = j + 1;
          end
      kptr <= k; jptr <= j; wr_count <= c;
    end
  end

  // ---- read side: barrel-rotated view of every register file ----
  always_comb begin
    logic [7:0] v [RF_N];
    logic [7:0] t [RF_N];
    logic [RW-1:0] r;
    int unsigned   j, n;
    r = rot[~fill];
    rd_data = '0;
    rd_mask = '0;
    for (int i = 0; i < RF_N; i++) begin v[i] = '0; t[i] = '0; end
    for (int k = 0; k < N_RF; k++) begin
      for (int j = 0; j < RF_N; j++) v[j] = mem[~fill][k*RF_N + j];
      // logical entry j reads physical entry (j + r) mod RF_N
      for (int s = 0; s < RW; s++)
        if (r[s]) begin
          for (int j = 0; j < RF_N; j++) t[j] = v[(j + ((1 << s) % RF_N)) % RF_N];
          v = t;
        end
      for (int c = 0; c < CHUNK; c++) begin
        j = 32'(rd_chunk) * CHUNK + c;
        n = k * RF_N + j;
        rd_data[k*CHUNK + c] = v[j][rd_plane];
        rd_mask[k*CHUNK + c] = (n >= 32'(n_elems)) || (sparsity_en && v[j] == 8'd0);
      end
    end
  end
endmodule
