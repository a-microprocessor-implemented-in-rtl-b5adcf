// sar_adc -- behavioural model of one column's 8-bit SAR ADC.
//
// This is a behavioural model of an analog block. The column voltage arrives
// as level/ncap * VDD (charged capacitors over capacitors sharing charge). The
// converter searches bit by bit, MSB first, comparing the input with a DAC
// reference trial/256 * Vfs, where the full scale Vfs = fs/ncap * VDD is
// programmable through fs. The result is code = min(255, floor(level*256/fs)).
// The chip's converter is an 8-b SAR; the programmable full scale is this
// design's assumption, made so that a column limited to 255 active inputs can
// reproduce integer results exactly (fs = 256), as the chip is said to do.
//
// Timing: start samples the input; 4 sampling cycles and 8 decisions of 2
// cycles each give done (one cycle) C_ADC = 20 cycles after start. code holds
// until the next start.
module sar_adc #(
  parameter int C_ADC = 20
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [11:0] level,
  input  logic [11:0] fs,
  output logic [7:0]  code,
  output logic        busy,
  output logic        done
);
  localparam int SAMPLE = C_ADC - 16;

  logic [11:0] vin;    // sampled input (charged capacitors)
  int unsigned cnt;
  int          bitpos;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      code <= '0; busy <= 1'b0; done <= 1'b0; cnt <= 0; vin <= '0; bitpos <= 7;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        vin    <= level;
        code   <= '0;
        busy   <= 1'b1;
        cnt    <= 1;
        bitpos <= 7;
      end else if (busy) begin
        cnt <= cnt + 1;
        // one comparator decision every 2 cycles after sampling
        if (cnt >= SAMPLE && ((cnt - SAMPLE) % 2 == 1) && bitpos >= 0) begin
          logic [8:0] trial;
          trial = {1'b0, code} | (9'd1 << bitpos);
          if (32'(vin) * 256 >= 32'(trial) * 32'(fs))
            code <= trial[7:0];
          bitpos <= bitpos - 1;
        end
        if (cnt == C_ADC - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
