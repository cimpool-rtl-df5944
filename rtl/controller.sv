// controller: sequencer of one weight-stationary tile.
//
// The core runs one tile per command.  A tile binds ROWS input channels and
// COLS filters at one kernel position; under weight-stationary dataflow its
// weights stay put while n_pix input vectors stream through.  The controller
//   cimpool_pkg::C_LOAD_IDX  reads the tile's index word and loads it into the scheduler,
//   cimpool_pkg::C_LOAD_ERR  reads the tile's ERR_ROWS error rows, one per cycle, and sends
//               them through the input buffer into the error array,
//   cimpool_pkg::C_STREAM    reads the n_pix input vectors (word in_base + p*in_stride)
//               whenever the input buffer can take one,
//   cimpool_pkg::C_FLUSH     waits until every vector has left the shift-and-add units,
//               then flushes a partly filled scheduler bank,
//   cimpool_pkg::C_DRAIN     waits until the accumulator has finished all n_pix pixels,
// and then pulses done and accepts the next command.  cmd_ready is high in
// cimpool_pkg::C_IDLE; a command is taken when cmd_valid and cmd_ready are both high, and
// start pulses in that cycle's successor so that the datapath counters
// restart.  The latched command is offered as cfg for the whole tile.
//
// The paper only names the controller in its architecture figure; this
// sequence is the simplest one that does the paper's per-layer flow (fetch
// errors into the error array, broadcast inputs to both arrays, permute and
// accumulate).  Reloading the error array stalls the arrays for ERR_ROWS
// cycles per tile; the paper notes this cost is small under weight-stationary
// dataflow, and this design does not hide it.
module controller

#(
  parameter int unsigned ERR_ROWS   = cimpool_pkg::ERR_ROWS,
  parameter int unsigned TILE_DEPTH = cimpool_pkg::TILE_DEPTH,
  parameter int unsigned ACT_DEPTH  = cimpool_pkg::ACT_DEPTH,
  localparam int unsigned TILE_AW   = (TILE_DEPTH > 1) ? $clog2(TILE_DEPTH) : 1,
  localparam int unsigned ERR_AW    = $clog2(TILE_DEPTH * ERR_ROWS),
  localparam int unsigned EROW_W    = (ERR_ROWS > 1) ? $clog2(ERR_ROWS) : 1,
  localparam int unsigned ACT_AW    = $clog2(ACT_DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  // command
  input  logic               cmd_valid,
  input  cimpool_pkg::tile_cmd_t          cmd,
  output logic               cmd_ready,
  output logic               done,
  output cimpool_pkg::tile_cmd_t          cfg,
  output logic               start,
  output cimpool_pkg::ctrl_state_e        state,
  // error/index SRAM
  output logic               idx_rd_en,
  output logic [TILE_AW-1:0] idx_rd_addr,
  output logic               idx_load,
  output logic               err_rd_en,
  output logic [ERR_AW-1:0]  err_rd_addr,
  output logic               erow_valid,
  output logic [EROW_W-1:0]  erow_addr,
  // activation SRAM and input buffer
  output logic               act_rd_en,
  output logic [ACT_AW-1:0]  act_rd_addr,
  output logic               ib_ld_valid,
  input  logic               ib_ready,
  // datapath progress
  input  logic               sa_valid,
  output logic               sched_flush,
  input  logic [15:0]        acc_n_done
);

  logic [EROW_W-1:0] row;
  logic [15:0]       issued, sa_cnt;
  logic [ACT_AW-1:0] rd_addr;
  logic              drain_wait;

  assign cmd_ready   = (state == cimpool_pkg::C_IDLE);
  assign idx_rd_en   = (state == cimpool_pkg::C_LOAD_IDX);
  assign idx_rd_addr = TILE_AW'(cfg.tile);
  assign err_rd_en   = (state == cimpool_pkg::C_LOAD_ERR);
  assign err_rd_addr = ERR_AW'(cfg.tile) * ERR_AW'(ERR_ROWS) + ERR_AW'(row);
  assign act_rd_en   = (state == cimpool_pkg::C_STREAM) && (issued < cfg.n_pix) && ib_ready && !ib_ld_valid;
  assign act_rd_addr = rd_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= cimpool_pkg::C_IDLE;
      cfg         <= '0;
      start       <= 1'b0;
      done        <= 1'b0;
      row         <= '0;
      issued      <= '0;
      sa_cnt      <= '0;
      rd_addr     <= '0;
      idx_load    <= 1'b0;
      erow_valid  <= 1'b0;
      erow_addr   <= '0;
      ib_ld_valid <= 1'b0;
      sched_flush <= 1'b0;
      drain_wait  <= 1'b0;
    end else begin
      start       <= 1'b0;
      done        <= 1'b0;
      sched_flush <= 1'b0;
      // one-cycle SRAM read latency
      idx_load    <= idx_rd_en;
      erow_valid  <= err_rd_en;
      erow_addr   <= row;
      ib_ld_valid <= act_rd_en;
      if (sa_valid) sa_cnt <= sa_cnt + 16'd1;

      unique case (state)
        cimpool_pkg::C_IDLE: if (cmd_valid) begin
          cfg     <= cmd;
          start   <= 1'b1;
          issued  <= '0;
          sa_cnt  <= '0;
          row     <= '0;
          rd_addr <= ACT_AW'(cmd.in_base);
          state   <= cimpool_pkg::C_LOAD_IDX;
        end
        cimpool_pkg::C_LOAD_IDX: state <= cimpool_pkg::C_LOAD_ERR;
        cimpool_pkg::C_LOAD_ERR: begin
          row <= row + 1'b1;
          if (row == EROW_W'(ERR_ROWS - 1)) state <= cimpool_pkg::C_STREAM;
        end
        cimpool_pkg::C_STREAM: begin
          if (act_rd_en) begin
            issued  <= issued + 16'd1;
            rd_addr <= rd_addr + ACT_AW'(cfg.in_stride);
          end
          if (issued == cfg.n_pix) state <= cimpool_pkg::C_FLUSH;
        end
        cimpool_pkg::C_FLUSH: if (sa_cnt == cfg.n_pix) begin
          sched_flush <= 1'b1;
          drain_wait  <= 1'b0;
          state       <= cimpool_pkg::C_DRAIN;
        end
        cimpool_pkg::C_DRAIN: begin
          // one extra cycle lets the last result reach the activation SRAM
          if (acc_n_done == cfg.n_pix) drain_wait <= 1'b1;
          if (drain_wait) begin
            done  <= 1'b1;
            state <= cimpool_pkg::C_IDLE;
          end
        end
        default: state <= cimpool_pkg::C_IDLE;
      endcase
    end
  end

endmodule
