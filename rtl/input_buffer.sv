// input_buffer: bit-serial broadcast of activation vectors to both CIM arrays.
//
// One activation word holds the 8-bit activations of ROWS input channels of
// one pixel; the low ACT_BITS bits of each are used (all 8 by default).  A word is accepted on ld_valid (only while ld_ready) into a
// shadow register, moved into the active register as soon as the previous
// word has been sent, and then sent as ACT_BITS bit planes, most significant
// bit first, one per cycle (bit_valid).  With a word always waiting, a new
// input vector starts every ACT_BITS cycles, so the CIM arrays are never idle.
//
// The same bit plane goes to the weight-pool array (all ROWS rows) and to the
// error array.  Error pruning is fully structured: at sparsity 1-1/S only the
// first of every S input channels keeps an error term, so error-array row r
// receives input channel r*ERR_STRIDE.  Channels at or above n_chan are fed as
// zero, as the paper does when a layer has fewer channels than the array has
// rows.
//
// The block also stages error rows on their way from the error/index SRAM into
// the error array (one register stage), as the paper's architecture figure
// routes the error memory through the input buffer.  Shadow/active double
// buffering, bit order and the one-stage error-row path are this design's
// choices.
module input_buffer #(
  parameter int unsigned ROWS     = cimpool_pkg::ROWS,
  parameter int unsigned COLS     = cimpool_pkg::COLS,
  parameter int unsigned ERR_ROWS = cimpool_pkg::ERR_ROWS,
  parameter int unsigned ACT_BITS = cimpool_pkg::ACT_BITS,
  localparam int unsigned ERR_STRIDE = ROWS / ERR_ROWS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [7:0]                    n_chan,
  // activation words
  input  logic                          ld_valid,
  input  logic [7:0]                    ld_data [ROWS],
  output logic                          ld_ready,
  // bit planes to the arrays
  output logic                          bit_valid,
  output logic [ROWS-1:0]               wp_bits,
  output logic [ERR_ROWS-1:0]           err_bits,
  // error rows to the error array
  input  logic                          erow_valid,
  input  logic [$clog2(ERR_ROWS)-1:0]   erow_addr,
  input  logic [COLS-1:0]               erow_data,
  output logic                          erow_wr_en,
  output logic [$clog2(ERR_ROWS)-1:0]   erow_wr_row,
  output logic [COLS-1:0]               erow_wr_data
);

  localparam int CNT_W = (ACT_BITS > 1) ? $clog2(ACT_BITS) : 1;

  logic [ACT_BITS-1:0] shadow [ROWS];
  logic [ACT_BITS-1:0] active [ROWS];
  logic                shadow_full, active_busy;
  logic [CNT_W-1:0]    bit_idx;
  logic                active_done, move;

  assign active_done = active_busy && (bit_idx == '0);
  assign move        = shadow_full && (!active_busy || active_done);
  assign ld_ready    = !shadow_full;

  always_ff @(posedge clk) begin
    if (ld_valid && ld_ready) begin
      for (int r = 0; r < ROWS; r++)
        shadow[r] <= (r < int'(n_chan)) ? ld_data[r][ACT_BITS-1:0] : '0;
    end
    if (move) active <= shadow;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shadow_full <= 1'b0;
      active_busy <= 1'b0;
      bit_idx     <= '0;
    end else begin
      if (ld_valid && ld_ready) shadow_full <= 1'b1;
      else if (move)            shadow_full <= 1'b0;
      if (move) begin
        active_busy <= 1'b1;
        bit_idx     <= CNT_W'(ACT_BITS - 1);
      end else if (active_busy) begin
        if (bit_idx == '0) active_busy <= 1'b0;
        else               bit_idx <= bit_idx - 1'b1;
      end
    end
  end

  // current bit plane (combinational from the active register)
  always_comb begin
    bit_valid = active_busy;
    for (int r = 0; r < ROWS; r++) wp_bits[r] = active[r][bit_idx];
    for (int r = 0; r < ERR_ROWS; r++) err_bits[r] = active[r * ERR_STRIDE][bit_idx];
  end

  // error-row staging
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      erow_wr_en   <= 1'b0;
      erow_wr_row  <= '0;
      erow_wr_data <= '0;
    end else begin
      erow_wr_en <= erow_valid;
      if (erow_valid) begin
        erow_wr_row  <= erow_addr;
        erow_wr_data <= erow_data;
      end
    end
  end

endmodule
