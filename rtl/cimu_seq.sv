// cimu_seq -- sequencer of one matrix-vector multiplication in the CIMU.
//
// The input vector is processed bit-serially, MSB plane first. For each of the
// Bx bit-planes the sequencer
//   LOAD : reads 4 chunks of the plane (and the mask) from the word-to-bit
//          buffer into the sparsity controller, one chunk per cycle;
//   CIMA : pulses the array and waits for its done (C_CIMA cycles);
//   CONV : pulses all ADCs and ABNs and waits for done (C_ADC cycles);
//   DP   : pulses the near-memory datapaths (first_plane on the first plane,
//          global exponent = plane index) and waits for their 8-cycle pass.
// After the last plane it pulses done and returns to IDLE. One bit-plane thus
// takes 4 + 1 + C_CIMA + 1 + C_ADC + 1 + C_NEARMEM (+1) cycles, about 86 at the
// chip's per-phase cycle counts, which this design uses. Running the phases one
// after another (no overlap between planes) is this design's choice.
// cycles counts the cycles of the last operation.
module cimu_seq (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [3:0]  bx,
  output logic        busy,
  output logic        done,
  // word-to-bit buffer / sparsity controller
  output logic [2:0]  plane,
  output logic [1:0]  chunk,
  output logic        ld_en,
  // array, converters, datapaths
  output logic        cima_start,
  input  logic        cima_done,
  output logic        conv_start,
  input  logic        conv_done,
  output logic        dp_start,
  output logic        dp_first,
  input  logic        dp_done,
  output logic [31:0] cycles
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_CIMA, S_CONV, S_DP} state_e;
  state_e state;
  logic [3:0] nplanes;

  assign busy     = (state != S_IDLE);
  assign ld_en    = (state == S_LOAD);
  assign dp_first = (4'(plane) == nplanes - 4'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; plane <= '0; chunk <= '0; done <= 1'b0;
      cima_start <= 1'b0; conv_start <= 1'b0; dp_start <= 1'b0; cycles <= '0;
      nplanes <= 4'd1;
    end else begin
      done <= 1'b0;
      cima_start <= 1'b0; conv_start <= 1'b0; dp_start <= 1'b0;
      if (state != S_IDLE) cycles <= cycles + 1;
      case (state)
        S_IDLE: if (start) begin
          nplanes <= (bx == 0) ? 4'd1 : (bx > 8 ? 4'd8 : bx);
          plane   <= (bx == 0) ? 3'd0 : (bx > 8 ? 3'd7 : 3'(bx - 4'd1));
          chunk   <= '0;
          cycles  <= 32'd1;
          state   <= S_LOAD;
        end
        S_LOAD: begin
          chunk <= chunk + 2'd1;
          if (chunk == 2'd3) begin
            state <= S_CIMA; cima_start <= 1'b1;
          end
        end
        S_CIMA: if (cima_done) begin
          state <= S_CONV; conv_start <= 1'b1;
        end
        S_CONV: if (conv_done) begin
          state <= S_DP; dp_start <= 1'b1;
        end
        S_DP: if (dp_done) begin
          if (plane == 3'd0) begin
            state <= S_IDLE; done <= 1'b1;
          end else begin
            plane <= plane - 3'd1; chunk <= '0; state <= S_LOAD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
