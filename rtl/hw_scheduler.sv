// hw_scheduler: hardware permutation of the weight-pool CIM outputs.
//
// Filters are bound to weight-pool columns by the weight-pool assignment, so
// the weight-pool array delivers its outputs in a permuted order.  The
// scheduler restores the natural filter order without a crossbar, as the
// paper describes (its Figs. 8 and 9):
//
//  * The 128 columns form N_GROUPS = COLS/GROUP_SIZE groups of 32.  A filter
//    of group g can only sit in a column of group g, so the groups are
//    permuted side by side.
//  * Within a group one address decoder (a GROUP_SIZE:1 selector) reads one
//    output per cycle; GROUP_SIZE cycles restore a whole vector.
//  * Because a new vector arrives only every ACT_BITS cycles (bit-serial
//    input), an output buffer collects K = GROUP_SIZE/ACT_BITS consecutive
//    vectors and K selectors work on them in parallel.  With weight-stationary
//    dataflow all these vectors share one channel order, so one index per
//    channel is shared by all K selectors.  The buffer is ping-pong: one bank
//    fills while the other is permuted.  At the paper's sizes that is
//    2 x 4 x 128 bytes = 1024 bytes, and the first permuted output follows
//    4 input cycles of filling.
//
// Index convention (Fig. 9): idx[f] is the position, inside filter f's group,
// of the column that computes filter f.  In step t (0..GROUP_SIZE-1) the
// selector of vector slot k and group g outputs
//     buf[bank][k][g*GROUP_SIZE + idx[g*GROUP_SIZE + t]]
// as out_data[k][g], i.e. filter g*GROUP_SIZE + t of the k-th vector.
//
// Interface: idx_load (while idle) latches the tile's indices.  in_valid
// writes one vector into slot wr_slot of bank wr_bank (both exported, so the
// error path can buffer its vectors in step).  A bank is launched when its
// K-th vector arrives, or by flush when a tile ends with fewer vectors; flush
// with an empty bank does nothing.  out_valid/out_t/out_mask/out_bank/out_last
// come from registers, one cycle after each step.  If a bank fills while the
// other is still being permuted the vector cannot be kept; overflow is then
// set (sticky until reset) and an assertion fires.  The buffer and index
// organisation follow the paper; flush, the handshake and overflow flag are
// this design's choices.
//
// Lint note: Verilator reports rst_n as used both synchronously and
// asynchronously (SYNCASYNCNET) because the overflow assertion uses it in its
// disable iff; the flip-flops themselves reset asynchronously only.
module hw_scheduler #(
  parameter int unsigned COLS       = cimpool_pkg::COLS,
  parameter int unsigned GROUP_SIZE = cimpool_pkg::GROUP_SIZE,
  parameter int unsigned ACT_BITS   = cimpool_pkg::ACT_BITS,
  parameter int unsigned OUT_W      = cimpool_pkg::OUT_W,
  localparam int unsigned N_GROUPS  = COLS / GROUP_SIZE,
  localparam int unsigned K         = (GROUP_SIZE / ACT_BITS > 0) ? GROUP_SIZE / ACT_BITS : 1,
  localparam int unsigned IDX_W     = (GROUP_SIZE > 1) ? $clog2(GROUP_SIZE) : 1,
  localparam int unsigned SLOT_W    = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned CNT_W     = $clog2(K + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // indices of the current tile
  input  logic                     idx_load,
  input  logic [IDX_W-1:0]         idx_in   [COLS],
  // weight-pool vectors in column order
  input  logic                     in_valid,
  input  logic signed [OUT_W-1:0]  in_data  [COLS],
  input  logic                     flush,
  output logic                     wr_bank,
  output logic [SLOT_W-1:0]        wr_slot,
  // permuted outputs
  output logic                     out_valid,
  output logic [IDX_W-1:0]         out_t,
  output logic [K-1:0]             out_mask,
  output logic                     out_bank,
  output logic                     out_last,
  output logic signed [OUT_W-1:0]  out_data [K][N_GROUPS],
  output logic                     busy,
  output logic                     overflow
);

  logic signed [OUT_W-1:0] obuf [2][K][COLS];
  logic [IDX_W-1:0]        idx  [COLS];

  logic             perm_busy, rd_bank;
  logic [IDX_W-1:0] t;
  logic [CNT_W-1:0] rd_count;
  logic             flush_pend;

  logic perm_ending, bank_full, launch_full, launch_flush, launch;
  assign perm_ending  = perm_busy && (t == IDX_W'(GROUP_SIZE - 1));
  assign bank_full    = in_valid && (wr_slot == SLOT_W'(K - 1));
  assign launch_full  = bank_full && (!perm_busy || perm_ending);
  assign launch_flush = !bank_full && (flush || flush_pend) && (wr_slot != '0) && !in_valid
                        && (!perm_busy || perm_ending);
  assign launch       = launch_full || launch_flush;
  assign busy         = perm_busy || flush_pend || (wr_slot != '0);

  // buffer writes and index register
  always_ff @(posedge clk) begin
    if (in_valid) obuf[wr_bank][wr_slot] <= in_data;
    if (idx_load) idx <= idx_in;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_bank    <= 1'b0;
      wr_slot    <= '0;
      perm_busy  <= 1'b0;
      rd_bank    <= 1'b0;
      t          <= '0;
      rd_count   <= '0;
      flush_pend <= 1'b0;
      overflow   <= 1'b0;
    end else begin
      // write side
      if (in_valid) begin
        if (bank_full) begin
          wr_slot <= '0;
          wr_bank <= ~wr_bank;
          if (!launch_full) overflow <= 1'b1;
        end else begin
          wr_slot <= wr_slot + 1'b1;
        end
      end
      // flush request is remembered until the partial bank can be launched
      if (launch_flush)
        flush_pend <= 1'b0;
      else if (flush || flush_pend)
        flush_pend <= !(((wr_slot == '0) && !in_valid) || bank_full);
      if (launch_flush) begin
        wr_slot <= '0;
        wr_bank <= ~wr_bank;
      end
      // permutation side
      if (launch) begin
        perm_busy <= 1'b1;
        rd_bank   <= wr_bank;
        t         <= '0;
        rd_count  <= launch_full ? CNT_W'(K) : CNT_W'(wr_slot);
      end else if (perm_busy) begin
        t <= t + 1'b1;
        if (perm_ending) perm_busy <= 1'b0;
      end
    end
  end

  // address decoders: one per (vector slot, group), index shared across slots
  logic [IDX_W-1:0] sel [N_GROUPS];
  always_comb
    for (int g = 0; g < N_GROUPS; g++) sel[g] = idx[g * GROUP_SIZE + int'(t)];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_t     <= '0;
      out_mask  <= '0;
      out_bank  <= 1'b0;
      out_last  <= 1'b0;
      for (int k = 0; k < K; k++)
        for (int g = 0; g < N_GROUPS; g++) out_data[k][g] <= '0;
    end else begin
      out_valid <= perm_busy;
      out_t     <= t;
      out_bank  <= rd_bank;
      out_last  <= perm_ending;
      for (int k = 0; k < K; k++) out_mask[k] <= perm_busy && (CNT_W'(k) < rd_count);
      if (perm_busy) begin
        for (int g = 0; g < N_GROUPS; g++)
          for (int k = 0; k < K; k++)
            out_data[k][g] <= obuf[rd_bank][k][g * GROUP_SIZE + int'(sel[g])];
      end
    end
  end

  // A full bank must never meet a busy permutation.  (The assertion's reset
  // condition is why linters see rst_n used both synchronously and
  // asynchronously; the flip-flops themselves are reset asynchronously only.)
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  !(bank_full && !launch_full));

endmodule
