// cimu_pkg -- types and constants shared by the in-memory-computing processor.
//
// The compute-in-memory array (CIMA) holds a 256 x 2304 one-bit matrix A in
// 768 physical rows of 768 bits (three logical input rows per physical row) and
// is split into 4 x 4 banks. The numbers below are the chip's own sizes. The
// per-phase cycle counts (array access 20, CIMA compute 50, ADC and ABN 20,
// near-memory datapath 8) are the chip's as well.
//
// The bus request/response structs and the configuration record are this
// design's own: the chip has an AXI system bus and an APB peripheral bus whose
// signal-level details are not published, so a simplified valid/ready bus and
// an APB3-style bus are used instead.
package cimu_pkg;

  localparam int N_ROWS    = 2304;  // input-vector dimensionality (3*3*256)
  localparam int N_COLS    = 256;   // CIMA columns (outputs per bit-plane)
  localparam int ROWS_PER_WL = 3;   // logical rows packed in one 768-b physical row
  localparam int WL_ROWS   = N_ROWS / ROWS_PER_WL;   // 768 word lines
  localparam int ROW_BITS  = N_COLS * ROWS_PER_WL;   // 768-b row writes
  localparam int N_RF      = 8;     // register files in the word-to-bit buffer
  localparam int WAYS      = 8;     // columns multiplexed onto one datapath
  localparam int C_RDWR    = 20;
  localparam int C_CIMA    = 50;
  localparam int C_ADC     = 20;
  localparam int C_ABN     = 20;
  localparam int C_NEARMEM = 8;

  // Simplified system-bus transfer: the master holds valid and the request
  // fields until the slave answers with ready; read data is valid with ready.
  typedef struct packed {
    logic        valid;
    logic        we;
    logic [31:0] addr;
    logic [31:0] wdata;
    logic [3:0]  be;
  } bus_req_t;

  typedef struct packed {
    logic        ready;
    logic [31:0] rdata;
  } bus_rsp_t;

  // APB3-style peripheral bus.
  typedef struct packed {
    logic        psel;
    logic        penable;
    logic        pwrite;
    logic [11:0] paddr;
    logic [31:0] pwdata;
  } apb_req_t;

  typedef struct packed {
    logic        pready;
    logic [31:0] prdata;
  } apb_rsp_t;

  // Bit-wise operation performed in the bit cells.
  typedef enum logic {
    MAC_XNOR = 1'b0,
    MAC_AND  = 1'b1
  } mac_mode_e;

  // Global CIMU configuration (see cimu_cfg for the register map).
  typedef struct packed {
    mac_mode_e          mode;         // XNOR (+1/-1 bits) or AND (0/1 bits)
    logic               abn_en;       // output binarized ABN bits instead of datapath results
    logic               relu_en;      // ReLU on datapath results
    logic               sparsity_en;  // mask zero-valued input elements
    logic [3:0]         bx;           // input-element bits, 1..8 (bit-serial)
    logic [3:0]         ba;           // matrix-element bits, 1..8 (bit-parallel columns)
    logic [3:0]         row_bank_en;  // activity gating of the 4 row banks
    logic [3:0]         col_bank_en;  // activity gating of the 4 column banks
    logic [11:0]        n_elems;      // valid input elements N; the rest are padded (masked)
    logic [11:0]        adc_fs;       // ADC full scale, in charged capacitors
    logic signed [8:0]  global_offset;
    logic [7:0]         offset_gain;  // weight of the unmasked-row tally in the offset (/256)
    logic [8:0]         conv_shift;   // elements per register file dropped on a convolution shift
  } cimu_cfg_t;

  // Per-column near-memory parameters.
  typedef struct packed {
    logic signed [8:0] loff;   // local offset
    logic signed [7:0] lscale; // local scale
    logic [3:0]        lexp;   // local exponent
    logic [5:0]        dac;    // ABN reference code
  } col_cfg_t;

  // Output element width of the near-memory datapath: 16 b when Bx+Ba <= 5.
  function automatic logic out16(input logic [3:0] bx, input logic [3:0] ba);
    return (5'(bx) + 5'(ba)) <= 5'd5;
  endfunction

endpackage
