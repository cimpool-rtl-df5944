// activation_sram: on-chip activation memory, written as plain arrays.
//
// Two banks.  The activation bank holds 8-bit activations, one word per
// pixel with ROWS channels; it is read by the input buffer and written by
// activation/pooling (or the host).  The partial-sum bank holds one word of
// COLS PSUM_W-bit partial sums per output pixel and is read and written by the
// accumulator.  Each bank has one read port (data the cycle after rd_en) and
// one write port; a read and write of the same word in one cycle returns the
// old word.
//
// The paper sizes the activation SRAM to hold the largest 8-bit intermediate
// activation of a 256 x 256 input (ResNet-18: 128 x 128 pixels after the
// first convolution); the depths here, 16384 words each, follow that.  Keeping
// the partial sums in a bank of their own, and their width, are this design's
// choices; the paper only shows the accumulator both reading and writing the
// activation SRAM.
module activation_sram #(
  parameter int unsigned ROWS       = cimpool_pkg::ROWS,
  parameter int unsigned COLS       = cimpool_pkg::COLS,
  parameter int unsigned PSUM_W     = cimpool_pkg::PSUM_W,
  parameter int unsigned ACT_DEPTH  = cimpool_pkg::ACT_DEPTH,
  parameter int unsigned PSUM_DEPTH = cimpool_pkg::PSUM_DEPTH,
  localparam int unsigned ACT_AW    = $clog2(ACT_DEPTH),
  localparam int unsigned PSUM_AW   = $clog2(PSUM_DEPTH)
) (
  input  logic                     clk,
  // activation bank
  input  logic                     act_rd_en,
  input  logic [ACT_AW-1:0]        act_rd_addr,
  output logic [7:0]               act_rd_data [ROWS],
  input  logic                     act_wr_en,
  input  logic [ACT_AW-1:0]        act_wr_addr,
  input  logic [7:0]               act_wr_data [ROWS],
  // partial-sum bank
  input  logic                     ps_rd_en,
  input  logic [PSUM_AW-1:0]       ps_rd_addr,
  output logic signed [PSUM_W-1:0] ps_rd_data [COLS],
  input  logic                     ps_wr_en,
  input  logic [PSUM_AW-1:0]       ps_wr_addr,
  input  logic signed [PSUM_W-1:0] ps_wr_data [COLS]
);

  logic [ROWS*8-1:0]      act_mem  [ACT_DEPTH];
  logic [COLS*PSUM_W-1:0] psum_mem [PSUM_DEPTH];
  logic [ROWS*8-1:0]      act_q;
  logic [COLS*PSUM_W-1:0] psum_q;
  logic [ROWS*8-1:0]      act_d;
  logic [COLS*PSUM_W-1:0] psum_d;

  always_comb begin
    for (int r = 0; r < ROWS; r++) act_d[r*8 +: 8] = act_wr_data[r];
    for (int c = 0; c < COLS; c++) psum_d[c*PSUM_W +: PSUM_W] = ps_wr_data[c];
  end

  always_ff @(posedge clk) begin
    if (act_rd_en) act_q <= act_mem[act_rd_addr];
    if (act_wr_en) act_mem[act_wr_addr] <= act_d;
    if (ps_rd_en)  psum_q <= psum_mem[ps_rd_addr];
    if (ps_wr_en)  psum_mem[ps_wr_addr] <= psum_d;
  end

  always_comb begin
    for (int r = 0; r < ROWS; r++) act_rd_data[r] = act_q[r*8 +: 8];
    for (int c = 0; c < COLS; c++) ps_rd_data[c] = psum_q[c*PSUM_W +: PSUM_W];
  end

endmodule
