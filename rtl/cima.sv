// cima -- behavioural model of the charge-domain compute-in-memory array.
//
// This is a behavioural model, not synthesizable logic: the real array is a
// full-custom block of 2304 x 256 bit cells, each a 6T SRAM cell plus two
// PMOS devices, a 1.2 fF metal capacitor and a shorting switch on the column.
//
// Storage. A physical row of 768 bits, selected by a one-hot word line, holds
// three logical input rows: bit b of physical row r is matrix bit w(n, m) with
// n = 3*r + b / N_COLS and m = b % N_COLS (the packing is this design's choice).
// Writes take effect at the clock edge with we=1; rdata is the selected row.
//
// Compute. A start pulse evaluates, for every column m, the charge sharing of
// its capacitors. Each cell's output o follows the cell: with x_n and xb_n both
// high both PMOS are off and the capacitor stays at 0 V; x_n low connects the
// complement node (~w) and xb_n low connects the stored weight bit w, so
//   o = (~x_n & ~w) | (~xb_n & w).
// With the pairs produced by sparsity_ctrl this is XNOR(w, x) or AND(w, x).
// The analog column voltage level/ncap * VDD is represented by the integer
// count of charged capacitors (level) and the number of capacitors sharing the
// charge (ncap = 576 per enabled row bank). Gated column banks output 0.
// level/ncap are valid from the cycle done is high (C_CIMA cycles after start)
// until the next start.
module cima #(
  parameter int N_ROWS   = 2304,
  parameter int N_COLS   = 256,
  parameter int C_CIMA   = 50,
  parameter int WL_ROWS  = N_ROWS / 3,
  parameter int ROW_BITS = N_COLS * 3
) (
  input  logic                clk,
  input  logic                rst_n,
  // SRAM port
  input  logic [WL_ROWS-1:0]  wl,
  input  logic                we,
  input  logic [ROW_BITS-1:0] wdata,
  output logic [ROW_BITS-1:0] rdata,
  // compute port
  input  logic [N_ROWS-1:0]   x_n,
  input  logic [N_ROWS-1:0]   xb_n,
  input  logic [3:0]          row_bank_en,
  input  logic [3:0]          col_bank_en,
  input  logic                start,
  output logic                busy,
  output logic                done,
  output logic [11:0]         level [N_COLS],
  output logic [11:0]         ncap
);
  localparam int RB = N_ROWS / 4;  // rows per bank
  localparam int CB = N_COLS / 4;  // columns per bank

  logic [N_COLS-1:0] mem [N_ROWS];
  int unsigned       cnt;

  // row read: the selected physical row
  always_comb begin
    rdata = '0;
    for (int r = 0; r < WL_ROWS; r++)
      if (wl[r])
        for (int k = 0; k < 3; k++)
          rdata[k*N_COLS +: N_COLS] = rdata[k*N_COLS +: N_COLS] | mem[3*r+k];
  end

  always @(posedge clk) begin
    if (we)
      for (int r = 0; r < WL_ROWS; r++)
        if (wl[r])
          for (int k = 0; k < 3; k++)
            mem[3*r+k] <= wdata[k*N_COLS +: N_COLS];
  end

  // charge-domain evaluation
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      cnt  <= 0;
      ncap <= '0;
      for (int m = 0; m < N_COLS; m++) level[m] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        logic [11:0] acc [N_COLS];
        logic [N_COLS-1:0] o;
        int nc;
        nc = 0;
        for (int m = 0; m < N_COLS; m++) acc[m] = '0;
        for (int b = 0; b < 4; b++)
          if (row_bank_en[b]) nc += RB;
        for (int n = 0; n < N_ROWS; n++) begin
          if (row_bank_en[n / RB]) begin
            o = ({N_COLS{~x_n[n]}} & ~mem[n]) | ({N_COLS{~xb_n[n]}} & mem[n]);
            for (int m = 0; m < N_COLS; m++)
              acc[m] += 12'(o[m]);
          end
        end
        for (int m = 0; m < N_COLS; m++)
          level[m] <= col_bank_en[m / CB] ? acc[m] : 12'd0;
        ncap <= 12'(nc);
        busy <= 1'b1;
        cnt  <= 1;
      end else if (busy) begin
        if (cnt == C_CIMA - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        cnt <= cnt + 1;
      end
    end
  end
endmodule
