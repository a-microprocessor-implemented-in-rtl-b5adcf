// near_mem_dp -- one 8-way multiplexed near-memory digital datapath.
//
// One datapath serves WAYS = 8 neighbouring array columns (32 datapaths for
// 256 columns). In one pass of 8 cycles it takes column j = 0..7 in turn:
//   s   = adc[j] + goff + loff[j]              (11-bit signed)
//   p   = s * lscale[j]                         (19-bit signed)
//   v   = p <<< (lexp[j] + gexp)                (32-bit signed)
//   rf[j / ba] = (clear ? 0 : rf[j / ba]) + v   (8 x 32-bit register file)
// where clear is set on the first bit-plane for the first column of each group.
// The bits of one matrix element sit in ba adjacent columns, so the local
// exponent gives each column its bit weight (a negative local scale gives a
// 2's-complement MSB) and the global exponent gives the weight of the input
// bit-plane being processed: the multi-bit product is built by shifting and
// adding over space (columns) and time (bit-planes). The widths 9/11/8/19/32 b,
// the 8-entry register file, the shifter and the ReLU unit follow the chip.
// Signedness, 4-bit exponents and the group-to-entry mapping are this design's.
//
// Outputs: result[e] is entry e after the optional ReLU, saturated to 16 bits
// (sign-extended) when out16_en is set. abn_q holds the 8 ABN bits captured at the
// start of the pass. start is accepted when idle; done pulses for one cycle
// when the eighth column has been accumulated.
module near_mem_dp
  import cimu_pkg::*;
#(
  parameter int WAYS = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              first_plane,
  input  logic [3:0]        gexp,
  input  logic [3:0]        ba,
  input  logic signed [8:0] goff,
  input  logic [7:0]        adc  [WAYS],
  input  logic              abn_bit [WAYS],
  input  col_cfg_t          ccfg [WAYS],
  input  logic              relu_en,
  input  logic              out16_en,
  output logic              busy,
  output logic              done,
  output logic [31:0]       result [WAYS],
  output logic [WAYS-1:0]   abn_q
);
  localparam int JW = $clog2(WAYS);

  logic signed [31:0] rf [WAYS];
  logic [JW-1:0]      j;
  logic               first_q;
  logic [3:0]         gexp_q;

  logic signed [10:0] s;
  logic signed [18:0] p;
  logic signed [31:0] v;
  logic [4:0]         sh;
  logic [JW-1:0]      e;
  logic               clr;

  always_comb begin
    logic [3:0] b;
    b   = (ba == 0) ? 4'd1 : ba;
    s   = 11'(signed'({1'b0, adc[j]})) + 11'(goff) + 11'(ccfg[j].loff);
    p   = 19'(s) * 19'(ccfg[j].lscale);
    sh  = 5'(ccfg[j].lexp) + 5'(gexp_q);
    v   = 32'(p) <<< sh;
    e   = JW'(32'(j) / 32'(b));
    clr = first_q && (32'(j) % 32'(b) == 0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; j <= '0; first_q <= 1'b0; gexp_q <= '0; abn_q <= '0;
      for (int i = 0; i < WAYS; i++) rf[i] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; j <= '0; first_q <= first_plane; gexp_q <= gexp;
        for (int i = 0; i < WAYS; i++) abn_q[i] <= abn_bit[i];
      end else if (busy) begin
        rf[e] <= (clr ? 32'sd0 : rf[e]) + v;
        if (32'(j) == WAYS - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        j <= j + 1'b1;
      end
    end
  end

  always_comb begin
    for (int i = 0; i < WAYS; i++) begin
      logic signed [31:0] r;
      r = rf[i];
      if (relu_en && r < 0) r = '0;
      if (out16_en) begin
        if (r > 32'sd32767) r = 32'sd32767;
        else if (r < -32'sd32768) r = -32'sd32768;
      end
      result[i] = r;
    end
  end
endmodule
