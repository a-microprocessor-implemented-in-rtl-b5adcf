// row_decoder -- word-line decoder of the compute-in-memory array.
//
// Turns a binary physical-row address into one-hot word lines for the array's
// 768 rows. The array names a "Row Decoder / WL Drivers" block beside it; the
// plain binary-to-one-hot decode is this design's reading of that name, and the
// electrical word-line drivers are not modelled. Purely combinational: wl is
// valid in the same cycle as addr and en. An out-of-range address selects no row.
module row_decoder #(
  parameter int ROWS = 768,
  parameter int AW   = $clog2(ROWS)
) (
  input  logic [AW-1:0]   addr,
  input  logic            en,
  output logic [ROWS-1:0] wl
);
  always_comb begin
    wl = '0;
    for (int r = 0; r < ROWS; r++)
      wl[r] = en && (32'(addr) == r);
  end
endmodule
