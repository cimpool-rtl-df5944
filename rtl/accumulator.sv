// accumulator: joins the weight-pool and error paths into partial sums.
//
// For every output pixel and filter f the layer output is, following the
// paper's error-scaling equation,
//     O = I x MAV(W) x W_wp  +  I x S x MAV(E) x E_q
// where the first product is the permuted weight-pool output and the second
// the error-array output of the same filter.  Both arrays see the same
// inputs, so this block forms
//     contrib[f] = mav_w * wp[f] + s_err * mav_e * err[f]
// and adds it to the running partial sum of that pixel, which lives in the
// partial-sum bank of the activation SRAM (read, add, write back).  On the
// first tile of an output the old sum is taken as zero; on the last tile
// the new sum is also passed on (res_valid) to activation and pooling.
//
// Timing.  The error array's outputs come out in natural filter order, one
// vector per input cycle, at the same moment the weight-pool vector of the
// same pixel enters the scheduler; they are kept in a ping-pong buffer with
// the scheduler's bank and slot numbers (this buffer is this design's choice:
// the paper does not say how the two paths are aligned).  The scheduler then
// delivers K permuted vectors, N_GROUPS filters per vector per cycle; they
// are gathered in an assembly register.  On the last step the complete
// vectors and their error vectors are copied to a finishing stage which
// handles one pixel per cycle: partial-sum read at step 1, write (and result)
// at step 2.  Pixels are numbered in arrival order from start (pulse), the
// partial-sum word of pixel p being psum_base + p; n_done counts finished
// pixels.  Scale factors are plain unsigned integers (this design's choice).
module accumulator #(
  parameter int unsigned COLS       = cimpool_pkg::COLS,
  parameter int unsigned GROUP_SIZE = cimpool_pkg::GROUP_SIZE,
  parameter int unsigned ACT_BITS   = cimpool_pkg::ACT_BITS,
  parameter int unsigned OUT_W      = cimpool_pkg::OUT_W,
  parameter int unsigned PSUM_W     = cimpool_pkg::PSUM_W,
  parameter int unsigned PSUM_AW    = $clog2(cimpool_pkg::PSUM_DEPTH),
  localparam int unsigned N_GROUPS  = COLS / GROUP_SIZE,
  localparam int unsigned K         = (GROUP_SIZE / ACT_BITS > 0) ? GROUP_SIZE / ACT_BITS : 1,
  localparam int unsigned IDX_W     = (GROUP_SIZE > 1) ? $clog2(GROUP_SIZE) : 1,
  localparam int unsigned SLOT_W    = (K > 1) ? $clog2(K) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // configuration of the current tile
  input  logic                     start,
  input  logic [PSUM_AW-1:0]       psum_base,
  input  logic                     first,
  input  logic                     last,
  input  logic [7:0]               mav_w,
  input  logic [7:0]               mav_e,
  input  logic [2:0]               s_err,
  output logic [15:0]              n_done,
  // error-array vectors, written where the scheduler writes its twin
  input  logic                     err_valid,
  input  logic signed [OUT_W-1:0]  err_data [COLS],
  input  logic                     err_bank,
  input  logic [SLOT_W-1:0]        err_slot,
  // permuted weight-pool outputs from the scheduler
  input  logic                     wp_valid,
  input  logic [IDX_W-1:0]         wp_t,
  input  logic [K-1:0]             wp_mask,
  input  logic                     wp_bank,
  input  logic                     wp_last,
  input  logic signed [OUT_W-1:0]  wp_data [K][N_GROUPS],
  // partial-sum bank (read data one cycle after rd_en)
  output logic                     ps_rd_en,
  output logic [PSUM_AW-1:0]       ps_rd_addr,
  input  logic signed [PSUM_W-1:0] ps_rd_data [COLS],
  output logic                     ps_wr_en,
  output logic [PSUM_AW-1:0]       ps_wr_addr,
  output logic signed [PSUM_W-1:0] ps_wr_data [COLS],
  // finished outputs (last tile only)
  output logic                     res_valid,
  output logic signed [PSUM_W-1:0] res_data [COLS]
);

  logic signed [OUT_W-1:0] ebuf [2][K][COLS];
  logic signed [OUT_W-1:0] asm_r [K][COLS];
  logic signed [OUT_W-1:0] fin_wp  [K][COLS];
  logic signed [OUT_W-1:0] fin_err [K][COLS];
  logic [K-1:0]            fin_mask;
  logic                    fin_go;
  logic [SLOT_W:0]         fk;          // pixel slot being read
  logic                    s2_valid;    // read issued last cycle
  logic [SLOT_W-1:0]       s2_k;
  logic [PSUM_AW-1:0]      s2_addr;
  logic [15:0]             pix;         // next pixel number to read

  always_ff @(posedge clk) begin
    if (err_valid) ebuf[err_bank][err_slot] <= err_data;
    if (wp_valid) begin
      for (int k = 0; k < K; k++)
        for (int g = 0; g < N_GROUPS; g++)
          asm_r[k][g * GROUP_SIZE + int'(wp_t)] <= wp_data[k][g];
    end
    if (wp_valid && wp_last) begin
      for (int k = 0; k < K; k++) begin
        fin_err[k] <= ebuf[wp_bank][k];
        for (int c = 0; c < COLS; c++)
          fin_wp[k][c] <= (c % GROUP_SIZE == int'(wp_t)) ? wp_data[k][c / GROUP_SIZE] : asm_r[k][c];
      end
    end
  end

  // finishing stage: one pixel per cycle, read then add/write
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fin_mask <= '0;
      fin_go   <= 1'b0;
      fk       <= '0;
      s2_valid <= 1'b0;
      s2_k     <= '0;
      s2_addr  <= '0;
      pix      <= '0;
      n_done   <= '0;
    end else begin
      s2_valid <= 1'b0;
      if (start) begin
        pix    <= '0;
        n_done <= '0;
      end
      if (wp_valid && wp_last) begin
        fin_mask <= wp_mask;
        fin_go   <= 1'b1;
        fk       <= '0;
      end else if (fin_go) begin
        if (fin_mask[fk[SLOT_W-1:0]]) begin
          s2_valid <= 1'b1;
          s2_k     <= fk[SLOT_W-1:0];
          s2_addr  <= psum_base + PSUM_AW'(pix);
          pix      <= pix + 16'd1;
        end
        if (fk == (SLOT_W + 1)'(K - 1)) fin_go <= 1'b0;
        fk <= fk + 1'b1;
      end
      if (s2_valid) n_done <= n_done + 16'd1;
    end
  end

  assign ps_rd_en   = fin_go && fin_mask[fk[SLOT_W-1:0]];
  assign ps_rd_addr = psum_base + PSUM_AW'(pix);

  // add and write back
  logic signed [PSUM_W-1:0] sum [COLS];
  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      logic signed [PSUM_W-1:0] base;
      base   = first ? '0 : ps_rd_data[c];
      sum[c] = base
             + PSUM_W'(fin_wp[s2_k][c])  * $signed({1'b0, mav_w})
             + PSUM_W'(fin_err[s2_k][c]) * $signed({1'b0, mav_e}) * $signed({1'b0, s_err});
    end
  end

  assign ps_wr_en   = s2_valid;
  assign ps_wr_addr = s2_addr;
  assign ps_wr_data = sum;
  assign res_valid  = s2_valid && last;
  assign res_data   = sum;

endmodule
