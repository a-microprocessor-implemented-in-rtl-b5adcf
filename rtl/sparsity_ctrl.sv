// sparsity_ctrl -- sparsity / AND-logic controller in front of the array.
//
// Holds one bit-plane of the input vector (data buffer) and one mask bit per
// element (mask buffer), 2304 bits each at full size. They are loaded from the
// word-to-bit buffer in four steps: with ld_en, chunk ld_chunk of every
// register file (CHUNK bits each) is written, i.e. 8 x 72 bits per cycle.
//
// From the buffers it drives one (x_n, xb_n) pair per array row:
//   masked row (mask bit set, or row in a gated bank): x_n = 1, xb_n = 1,
//     both PMOS off, the row's capacitors stay discharged;
//   XNOR mode: x_n = x, xb_n = ~x;
//   AND mode:  x_n = 1 (held high), xb_n = ~x.
// Holding both high to disable a row, and driving only xb_n for AND, follow the
// chip; the exact polarity of the pair is this design's reading.
//
// unmasked is the number of rows in enabled banks that take part (the tally of
// the located zero/padding elements, counted from the other side); the CIMU
// turns it into the offset that accounts for capacitors left discharged. It is
// registered: valid one cycle after the last load.
module sparsity_ctrl
  import cimu_pkg::*;
#(
  parameter int N_ROWS = 2304,
  parameter int N_RF   = 8,
  parameter int RF_N   = N_ROWS / N_RF,
  parameter int CHUNK  = RF_N / 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  mac_mode_e              mode,
  input  logic [3:0]             row_bank_en,
  input  logic                   ld_en,
  input  logic [1:0]             ld_chunk,
  input  logic [N_RF*CHUNK-1:0]  ld_data,
  input  logic [N_RF*CHUNK-1:0]  ld_mask,
  output logic [N_ROWS-1:0]      x_n,
  output logic [N_ROWS-1:0]      xb_n,
  output logic [11:0]            unmasked
);
  localparam int RB = N_ROWS / 4;

  logic [N_ROWS-1:0] dbuf, mbuf, off;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dbuf <= '0;
      mbuf <= '1;
    end else if (ld_en) begin
      for (int k = 0; k < N_RF; k++)
        for (int c = 0; c < CHUNK; c++) begin
          dbuf[k*RF_N + 32'(ld_chunk)*CHUNK + c] <= ld_data[k*CHUNK + c];
          mbuf[k*RF_N + 32'(ld_chunk)*CHUNK + c] <= ld_mask[k*CHUNK + c];
        end
    end
  end

  always_comb begin
    for (int n = 0; n < N_ROWS; n++) begin
      off[n]  = mbuf[n] || !row_bank_en[n / RB];
      x_n[n]  = off[n] || (mode == MAC_AND) || dbuf[n];
      xb_n[n] = off[n] || !dbuf[n];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) unmasked <= '0;
    else begin
      logic [11:0] s;
      s = '0;
      for (int n = 0; n < N_ROWS; n++) s += 12'(!off[n]);
      unmasked <= s;
    end
  end
endmodule
