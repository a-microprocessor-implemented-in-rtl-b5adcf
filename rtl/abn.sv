// abn -- behavioural model of one column's binarizing analog batch normalization.
//
// This is a behavioural model of an analog block. A 6-bit DAC sets a reference
// dac/64 * VDD and a comparator decides whether the column voltage
// level/ncap * VDD lies above it, giving a one-bit (binarized) activation. The
// 6-b DAC and the comparator follow the chip; the reference spanning 0..VDD in
// 64 steps is this design's assumption.
//
// Timing: out is decided on start and reported with done C_ABN cycles later;
// it holds until the next start.
module abn #(
  parameter int C_ABN = 20
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [11:0] level,
  input  logic [11:0] ncap,
  input  logic [5:0]  dac,
  output logic        out,
  output logic        done
);
  int unsigned cnt;
  logic        busy;
  logic        res;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out <= 1'b0; done <= 1'b0; cnt <= 0; busy <= 1'b0; res <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        res  <= (32'(level) * 64) > (32'(dac) * 32'(ncap));
        busy <= 1'b1;
        cnt  <= 1;
      end else if (busy) begin
        cnt <= cnt + 1;
        if (cnt == C_ABN - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
          out  <= res;
        end
      end
    end
  end
endmodule
