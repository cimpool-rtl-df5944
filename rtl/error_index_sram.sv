// error_index_sram: storage of the compressed weights, written as arrays.
//
// CIMPool never stores weight values.  Each weight-stationary tile (ROWS input
// channels x COLS filters at one kernel position) is kept as
//  * one index word: for each of the COLS filters, the IDX_W-bit position of
//    its weight-pool vector inside its group (5 bits with groups of 32), and
//  * ERR_ROWS error rows of COLS bits: the 1-bit error terms (1 = +1,
//    0 = -1) of the input channels that keep an error after structured
//    pruning, one row per such channel.
// So a tile costs COLS*(IDX_W + ERR_ROWS) bits, 69 bits per 128-weight vector
// at 0.5 sparsity as in the paper's compression table.  Error row r of tile t
// sits at word t*ERR_ROWS + r.  Each bank has a host write port and a read port
// with data the cycle after rd_en.  TILE_DEPTH (1024 tiles) is this design's
// choice; ResNet-18 needs 794 such tiles.
module error_index_sram #(
  parameter int unsigned COLS       = cimpool_pkg::COLS,
  parameter int unsigned GROUP_SIZE = cimpool_pkg::GROUP_SIZE,
  parameter int unsigned ERR_ROWS   = cimpool_pkg::ERR_ROWS,
  parameter int unsigned TILE_DEPTH = cimpool_pkg::TILE_DEPTH,
  localparam int unsigned IDX_W     = (GROUP_SIZE > 1) ? $clog2(GROUP_SIZE) : 1,
  localparam int unsigned TILE_AW   = (TILE_DEPTH > 1) ? $clog2(TILE_DEPTH) : 1,
  localparam int unsigned ERR_AW    = $clog2(TILE_DEPTH * ERR_ROWS)
) (
  input  logic                 clk,
  // index bank
  input  logic                 idx_wr_en,
  input  logic [TILE_AW-1:0]   idx_wr_addr,
  input  logic [IDX_W-1:0]     idx_wr_data [COLS],
  input  logic                 idx_rd_en,
  input  logic [TILE_AW-1:0]   idx_rd_addr,
  output logic [IDX_W-1:0]     idx_rd_data [COLS],
  // error bank
  input  logic                 err_wr_en,
  input  logic [ERR_AW-1:0]    err_wr_addr,
  input  logic [COLS-1:0]      err_wr_data,
  input  logic                 err_rd_en,
  input  logic [ERR_AW-1:0]    err_rd_addr,
  output logic [COLS-1:0]      err_rd_data
);

  logic [COLS*IDX_W-1:0] idx_mem [TILE_DEPTH];
  logic [COLS-1:0]       err_mem [TILE_DEPTH * ERR_ROWS];
  logic [COLS*IDX_W-1:0] idx_q, idx_d;

  always_comb
    for (int c = 0; c < COLS; c++) idx_d[c*IDX_W +: IDX_W] = idx_wr_data[c];

  always_ff @(posedge clk) begin
    if (idx_wr_en) idx_mem[idx_wr_addr] <= idx_d;
    if (idx_rd_en) idx_q <= idx_mem[idx_rd_addr];
    if (err_wr_en) err_mem[err_wr_addr] <= err_wr_data;
    if (err_rd_en) err_rd_data <= err_mem[err_rd_addr];
  end

  always_comb
    for (int c = 0; c < COLS; c++) idx_rd_data[c] = idx_q[c*IDX_W +: IDX_W];

endmodule
