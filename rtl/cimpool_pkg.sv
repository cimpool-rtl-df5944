// cimpool_pkg: sizes and types shared by the CIMPool core.
//
// The weight pool is held in one 128 x 128 SRAM compute-in-memory (CIM) array
// with 1-bit (+1/-1) cells.  Its 128 columns are split into 4 groups of 32
// vectors, so a filter's position inside its group is named by a 5-bit index.
// Activations are 8 bits wide and enter the arrays bit-serially; each column
// has its own 8-bit ADC.  With 50 % error sparsity (the default configuration)
// the error array keeps the error term of every second input channel and so
// has 64 rows.  These numbers follow the paper.  The widths of partial sums,
// scale factors and addresses, and the memory depths, are this design's own
// choices (see the README).
package cimpool_pkg;

  // ---- array geometry (paper) ----
  localparam int unsigned ROWS       = 128;  // weight-pool vector length (input channels per tile)
  localparam int unsigned COLS       = 128;  // weight-pool size (filters per tile)
  localparam int unsigned GROUP_SIZE = 32;   // weight-pool group size
  localparam int unsigned ACT_BITS   = 8;    // activation precision, bit-serial cycles per input
  localparam int unsigned ADC_W      = 8;    // ADC resolution
  localparam int unsigned OUT_W      = 8;    // width of one CIM output word in the scheduler buffer
  localparam int unsigned ERR_ROWS   = 64;   // error-array rows at 0.5 error sparsity

  // ---- this design's choices ----
  localparam int unsigned PSUM_W     = 24;   // partial-sum width
  localparam int unsigned TILE_DEPTH = 1024; // tiles held in the error/index SRAM
  localparam int unsigned ACT_DEPTH  = 16384;// activation words (one 128-channel pixel each)
  localparam int unsigned PSUM_DEPTH = 16384;// partial-sum words (one 128-channel pixel each)

  // Command that describes one weight-stationary tile: a 128 x 128 slice of a
  // layer (one kernel position, one block of input channels, one block of
  // filters) applied to n_pix input vectors.
  typedef struct packed {
    logic [15:0] tile;       // tile number in the error/index SRAM
    logic [15:0] n_pix;      // input vectors (output pixels) to stream, >= 1
    logic [15:0] in_base;    // activation word of the first input vector
    logic [15:0] in_stride;  // activation words between consecutive input vectors
    logic [15:0] psum_base;  // partial-sum word of the first output pixel
    logic [15:0] out_base;   // activation word of the first (pooled) output
    logic [7:0]  n_chan;     // valid input channels (rows) in this tile, 1..128
    logic        first;      // first tile of this output: start from a zero partial sum
    logic        last;       // last tile of this output: activate, pool and store
    logic [3:0]  sa_shift;   // right shift after shift-and-add, before 8-bit saturation
    logic [7:0]  mav_w;      // scale of the weight-pool output, MAV(W_ori)
    logic [7:0]  mav_e;      // scale of the error output, MAV(E)
    logic [2:0]  s_err;      // error scaling factor S
    logic [4:0]  act_shift;  // requantisation shift before the 8-bit activation
    logic [2:0]  pool_n;     // outputs per pooling window (1 = no pooling)
  } tile_cmd_t;

  typedef enum logic [2:0] {
    C_IDLE, C_LOAD_IDX, C_LOAD_ERR, C_STREAM, C_FLUSH, C_DRAIN
  } ctrl_state_e;

endpackage
