// act_pool: activation function and pooling of finished outputs.
//
// Each finished output vector (one pixel, COLS filters, PSUM_W-bit signed
// sums) is passed through ReLU, shifted right by act_shift and saturated to an
// unsigned 8-bit activation, the precision the paper uses for all
// activations.  Pooling takes the maximum over pool_n consecutive output
// vectors (pool_n = 1 disables it); the controller must stream the pixels of
// one pooling window back to back.  Each completed (pooled) vector is written
// to the activation SRAM at out_base + n, n counting from start.  The write
// port is registered: act_wr_* are valid the cycle after the input that
// completes a window.
//
// The paper names this block (its architecture figure) but does not describe
// it; ReLU, shift-and-saturate requantisation and max pooling over consecutive
// vectors are this design's choices.
module act_pool #(
  parameter int unsigned COLS    = cimpool_pkg::COLS,
  parameter int unsigned PSUM_W  = cimpool_pkg::PSUM_W,
  parameter int unsigned ACT_AW  = $clog2(cimpool_pkg::ACT_DEPTH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [ACT_AW-1:0]        out_base,
  input  logic [4:0]               act_shift,
  input  logic [2:0]               pool_n,
  input  logic                     in_valid,
  input  logic signed [PSUM_W-1:0] in_data [COLS],
  output logic                     act_wr_en,
  output logic [ACT_AW-1:0]        act_wr_addr,
  output logic [7:0]               act_wr_data [COLS]
);

  logic [7:0]        q    [COLS];
  logic [7:0]        pmax [COLS];
  logic [2:0]        pcnt;
  logic [ACT_AW-1:0] n_out;
  logic              window_end;

  assign window_end = (pool_n <= 3'd1) || (pcnt == pool_n - 3'd1);

  logic [7:0] m [COLS];
  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      logic signed [PSUM_W-1:0] s;
      s = (in_data[c] < 0) ? '0 : (in_data[c] >>> act_shift);
      q[c] = (s > PSUM_W'(255)) ? 8'd255 : s[7:0];
      m[c] = (pcnt == '0 || q[c] > pmax[c]) ? q[c] : pmax[c];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pcnt      <= '0;
      n_out     <= '0;
      act_wr_en <= 1'b0;
      act_wr_addr <= '0;
      for (int c = 0; c < COLS; c++) begin
        pmax[c]        <= '0;
        act_wr_data[c] <= '0;
      end
    end else begin
      act_wr_en <= 1'b0;
      if (start) begin
        pcnt  <= '0;
        n_out <= '0;
      end else if (in_valid) begin
        pmax <= m;
        if (window_end) act_wr_data <= m;
        if (window_end) begin
          pcnt        <= '0;
          act_wr_en   <= 1'b1;
          act_wr_addr <= out_base + n_out;
          n_out       <= n_out + 1'b1;
        end else begin
          pcnt <= pcnt + 1'b1;
        end
      end
    end
  end

endmodule
