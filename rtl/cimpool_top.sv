// cimpool_top: the CIMPool accelerator core.
//
// CIMPool stores a network not as weights but as, for every 128-weight vector,
// a 5-bit index into a fixed pool of 128 random binary vectors plus a pruned
// 1-bit error term.  Two SRAM CIM arrays do all the arithmetic: the weight-pool
// array (ROWS x COLS, written once) and the error array (ERR_ROWS x COLS,
// rewritten for each tile from the error/index SRAM).  Per tile:
//
//   error/index SRAM --idx--> scheduler          --err rows--> input buffer --> error array
//   activation SRAM --> input buffer --bit planes--> weight-pool array and error array
//   weight-pool array --> S&A --> scheduler (un-permute) --> accumulator
//   error array       --> S&A ------------------------------> accumulator
//   accumulator <--> partial sums (activation SRAM);  accumulator --> act/pool --> activation SRAM
//
// all under the controller, as in the paper's architecture figure.  That
// figure draws no path from the error/index SRAM to the scheduler; the index
// word is sent there directly because the scheduler is where it is used.
//
// Host interface (plain signals): the weight pool is written through
// wp_wr_*; compressed tiles through idx_wr_* and err_wr_*; input activations
// through host_act_wr_* and results are read through host_act_rd_* (data one
// cycle later).  Host accesses to the activation SRAM are only allowed while
// cmd_ready is high.  A tile runs when cmd_valid meets cmd_ready and ends with
// a done pulse.  overflow reports a scheduler buffer overrun, which the
// matched rates of the design never cause.  ctrl_state and sched_busy show
// the controller's phase and whether the scheduler still holds vectors.  Streaming rate: one input vector
// per ACT_BITS cycles; the first permuted output appears after
// GROUP_SIZE/ACT_BITS input cycles of buffer filling.
//
// Lint notes.  Verilator reports rst_n as used both synchronously and
// asynchronously (SYNCASYNCNET): the synchronous use is only the disable iff
// of the lock-step assertion at the end; every flip-flop resets
// asynchronously.  It also reports the tile, n_pix, in_base and in_stride
// bits of cfg as unused here: those fields are consumed inside the
// controller, which keeps its own copy of the command.
module cimpool_top

#(
  parameter int unsigned ROWS       = cimpool_pkg::ROWS,
  parameter int unsigned COLS       = cimpool_pkg::COLS,
  parameter int unsigned GROUP_SIZE = cimpool_pkg::GROUP_SIZE,
  parameter int unsigned ACT_BITS   = cimpool_pkg::ACT_BITS,
  parameter int unsigned ERR_ROWS   = cimpool_pkg::ERR_ROWS,
  parameter int unsigned PSUM_W     = cimpool_pkg::PSUM_W,
  parameter int unsigned TILE_DEPTH = cimpool_pkg::TILE_DEPTH,
  parameter int unsigned ACT_DEPTH  = cimpool_pkg::ACT_DEPTH,
  parameter int unsigned PSUM_DEPTH = cimpool_pkg::PSUM_DEPTH,
  localparam int unsigned ADC_W     = cimpool_pkg::ADC_W,
  localparam int unsigned OUT_W     = cimpool_pkg::OUT_W,
  localparam int unsigned N_GROUPS  = COLS / GROUP_SIZE,
  localparam int unsigned K         = (GROUP_SIZE / ACT_BITS > 0) ? GROUP_SIZE / ACT_BITS : 1,
  localparam int unsigned IDX_W     = (GROUP_SIZE > 1) ? $clog2(GROUP_SIZE) : 1,
  localparam int unsigned SLOT_W    = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned TILE_AW   = (TILE_DEPTH > 1) ? $clog2(TILE_DEPTH) : 1,
  localparam int unsigned ERR_AW    = $clog2(TILE_DEPTH * ERR_ROWS),
  localparam int unsigned EROW_W    = (ERR_ROWS > 1) ? $clog2(ERR_ROWS) : 1,
  localparam int unsigned ACT_AW    = $clog2(ACT_DEPTH),
  localparam int unsigned PSUM_AW   = $clog2(PSUM_DEPTH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // tile commands
  input  logic                     cmd_valid,
  input  cimpool_pkg::tile_cmd_t                cmd,
  output logic                     cmd_ready,
  output logic                     done,
  output logic                     overflow,
  output cimpool_pkg::ctrl_state_e ctrl_state,
  output logic                     sched_busy,
  // weight-pool array contents
  input  logic                     wp_wr_en,
  input  logic [$clog2(ROWS)-1:0]  wp_wr_row,
  input  logic [COLS-1:0]          wp_wr_data,
  // compressed weights
  input  logic                     idx_wr_en,
  input  logic [TILE_AW-1:0]       idx_wr_addr,
  input  logic [IDX_W-1:0]         idx_wr_data [COLS],
  input  logic                     err_wr_en,
  input  logic [ERR_AW-1:0]        err_wr_addr,
  input  logic [COLS-1:0]          err_wr_data,
  // host access to the activation bank
  input  logic                     host_act_wr_en,
  input  logic [ACT_AW-1:0]        host_act_wr_addr,
  input  logic [7:0]               host_act_wr_data [ROWS],
  input  logic                     host_act_rd_en,
  input  logic [ACT_AW-1:0]        host_act_rd_addr,
  output logic [7:0]               host_act_rd_data [ROWS]
);

  // ---------------- controller ----------------
  cimpool_pkg::tile_cmd_t          cfg;
  logic               start;
  logic               idx_rd_en, idx_load, err_rd_en, erow_valid;
  logic [TILE_AW-1:0] idx_rd_addr;
  logic [ERR_AW-1:0]  err_rd_addr;
  logic [EROW_W-1:0]  erow_addr;
  logic               c_act_rd_en, ib_ld_valid, ib_ready;
  logic [ACT_AW-1:0]  c_act_rd_addr;
  logic               wsa_valid, esa_valid, sched_flush;
  logic [15:0]        acc_n_done;

  controller #(.ERR_ROWS(ERR_ROWS), .TILE_DEPTH(TILE_DEPTH), .ACT_DEPTH(ACT_DEPTH)) u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd, .cmd_ready, .done, .cfg, .start, .state(ctrl_state),
    .idx_rd_en, .idx_rd_addr, .idx_load,
    .err_rd_en, .err_rd_addr, .erow_valid, .erow_addr,
    .act_rd_en(c_act_rd_en), .act_rd_addr(c_act_rd_addr), .ib_ld_valid, .ib_ready,
    .sa_valid(wsa_valid), .sched_flush, .acc_n_done
  );

  // ---------------- memories ----------------
  logic [IDX_W-1:0] idx_rd_data [COLS];
  logic [COLS-1:0]  err_rd_data;

  error_index_sram #(.COLS(COLS), .GROUP_SIZE(GROUP_SIZE), .ERR_ROWS(ERR_ROWS),
                     .TILE_DEPTH(TILE_DEPTH)) u_eisram (
    .clk,
    .idx_wr_en, .idx_wr_addr, .idx_wr_data,
    .idx_rd_en, .idx_rd_addr, .idx_rd_data,
    .err_wr_en, .err_wr_addr, .err_wr_data,
    .err_rd_en, .err_rd_addr, .err_rd_data
  );

  logic                     act_rd_en, act_wr_en, ap_wr_en;
  logic [ACT_AW-1:0]        act_rd_addr, act_wr_addr, ap_wr_addr;
  logic [7:0]               act_rd_data [ROWS];
  logic [7:0]               act_wr_data [ROWS];
  logic [7:0]               ap_wr_data  [COLS];
  logic                     ps_rd_en, ps_wr_en;
  logic [PSUM_AW-1:0]       ps_rd_addr, ps_wr_addr;
  logic signed [PSUM_W-1:0] ps_rd_data [COLS];
  logic signed [PSUM_W-1:0] ps_wr_data [COLS];

  // the host owns the activation bank while no tile runs
  assign act_rd_en        = cmd_ready ? host_act_rd_en   : c_act_rd_en;
  assign act_rd_addr      = cmd_ready ? host_act_rd_addr : c_act_rd_addr;
  assign act_wr_en        = cmd_ready ? host_act_wr_en   : ap_wr_en;
  assign act_wr_addr      = cmd_ready ? host_act_wr_addr : ap_wr_addr;
  assign host_act_rd_data = act_rd_data;
  always_comb
    for (int r = 0; r < ROWS; r++)
      act_wr_data[r] = cmd_ready ? host_act_wr_data[r] : ((r < COLS) ? ap_wr_data[r] : 8'd0);

  activation_sram #(.ROWS(ROWS), .COLS(COLS), .PSUM_W(PSUM_W), .ACT_DEPTH(ACT_DEPTH),
                    .PSUM_DEPTH(PSUM_DEPTH)) u_asram (
    .clk,
    .act_rd_en, .act_rd_addr, .act_rd_data,
    .act_wr_en, .act_wr_addr, .act_wr_data,
    .ps_rd_en, .ps_rd_addr, .ps_rd_data,
    .ps_wr_en, .ps_wr_addr, .ps_wr_data
  );

  // ---------------- input buffer ----------------
  logic                  bit_valid;
  logic [ROWS-1:0]       wp_bits;
  logic [ERR_ROWS-1:0]   err_bits;
  logic                  erow_wr_en;
  logic [EROW_W-1:0]     erow_wr_row;
  logic [COLS-1:0]       erow_wr_data;

  input_buffer #(.ROWS(ROWS), .COLS(COLS), .ERR_ROWS(ERR_ROWS), .ACT_BITS(ACT_BITS)) u_ibuf (
    .clk, .rst_n,
    .n_chan(cfg.n_chan),
    .ld_valid(ib_ld_valid), .ld_data(act_rd_data), .ld_ready(ib_ready),
    .bit_valid, .wp_bits, .err_bits,
    .erow_valid, .erow_addr, .erow_data(err_rd_data),
    .erow_wr_en, .erow_wr_row, .erow_wr_data
  );

  // ---------------- CIM arrays and shift-and-add ----------------
  logic                    wadc_valid, eadc_valid;
  logic signed [ADC_W-1:0] wadc [COLS];
  logic signed [ADC_W-1:0] eadc [COLS];
  logic signed [OUT_W-1:0] wsa  [COLS];
  logic signed [OUT_W-1:0] esa  [COLS];

  cim_array #(.ROWS(ROWS), .COLS(COLS), .ADC_W(ADC_W)) u_wp_cim (
    .clk, .rst_n,
    .wr_en(wp_wr_en), .wr_row(wp_wr_row), .wr_data(wp_wr_data),
    .in_valid(bit_valid), .in_bits(wp_bits),
    .adc_valid(wadc_valid), .adc_out(wadc)
  );

  cim_array #(.ROWS(ERR_ROWS), .COLS(COLS), .ADC_W(ADC_W)) u_err_cim (
    .clk, .rst_n,
    .wr_en(erow_wr_en), .wr_row(erow_wr_row), .wr_data(erow_wr_data),
    .in_valid(bit_valid), .in_bits(err_bits),
    .adc_valid(eadc_valid), .adc_out(eadc)
  );

  shift_add #(.COLS(COLS), .ADC_W(ADC_W), .ACT_BITS(ACT_BITS), .OUT_W(OUT_W)) u_wp_sa (
    .clk, .rst_n, .shift(cfg.sa_shift),
    .in_valid(wadc_valid), .in_adc(wadc), .out_valid(wsa_valid), .out_data(wsa)
  );

  shift_add #(.COLS(COLS), .ADC_W(ADC_W), .ACT_BITS(ACT_BITS), .OUT_W(OUT_W)) u_err_sa (
    .clk, .rst_n, .shift(cfg.sa_shift),
    .in_valid(eadc_valid), .in_adc(eadc), .out_valid(esa_valid), .out_data(esa)
  );

  // ---------------- hardware scheduler ----------------
  logic                    sched_wr_bank;
  logic [SLOT_W-1:0]       sched_wr_slot;
  logic                    p_valid, p_bank, p_last;
  logic [IDX_W-1:0]        p_t;
  logic [K-1:0]            p_mask;
  logic signed [OUT_W-1:0] p_data [K][N_GROUPS];

  hw_scheduler #(.COLS(COLS), .GROUP_SIZE(GROUP_SIZE), .ACT_BITS(ACT_BITS), .OUT_W(OUT_W)) u_sched (
    .clk, .rst_n,
    .idx_load, .idx_in(idx_rd_data),
    .in_valid(wsa_valid), .in_data(wsa), .flush(sched_flush),
    .wr_bank(sched_wr_bank), .wr_slot(sched_wr_slot),
    .out_valid(p_valid), .out_t(p_t), .out_mask(p_mask), .out_bank(p_bank),
    .out_last(p_last), .out_data(p_data),
    .busy(sched_busy), .overflow
  );

  // ---------------- accumulator, activation and pooling ----------------
  logic                     res_valid;
  logic signed [PSUM_W-1:0] res_data [COLS];

  accumulator #(.COLS(COLS), .GROUP_SIZE(GROUP_SIZE), .ACT_BITS(ACT_BITS), .OUT_W(OUT_W),
                .PSUM_W(PSUM_W), .PSUM_AW(PSUM_AW)) u_acc (
    .clk, .rst_n,
    .start, .psum_base(PSUM_AW'(cfg.psum_base)), .first(cfg.first), .last(cfg.last),
    .mav_w(cfg.mav_w), .mav_e(cfg.mav_e), .s_err(cfg.s_err), .n_done(acc_n_done),
    .err_valid(esa_valid), .err_data(esa), .err_bank(sched_wr_bank), .err_slot(sched_wr_slot),
    .wp_valid(p_valid), .wp_t(p_t), .wp_mask(p_mask), .wp_bank(p_bank), .wp_last(p_last),
    .wp_data(p_data),
    .ps_rd_en, .ps_rd_addr, .ps_rd_data, .ps_wr_en, .ps_wr_addr, .ps_wr_data,
    .res_valid, .res_data
  );

  act_pool #(.COLS(COLS), .PSUM_W(PSUM_W), .ACT_AW(ACT_AW)) u_actpool (
    .clk, .rst_n, .start,
    .out_base(ACT_AW'(cfg.out_base)), .act_shift(cfg.act_shift), .pool_n(cfg.pool_n),
    .in_valid(res_valid), .in_data(res_data),
    .act_wr_en(ap_wr_en), .act_wr_addr(ap_wr_addr), .act_wr_data(ap_wr_data)
  );

  // The two shift-and-add units always finish together.  (This assertion's
  // reset condition makes linters report rst_n as used both synchronously and
  // asynchronously; all flip-flops are reset asynchronously.)
  a_sa_lockstep: assert property (@(posedge clk) disable iff (!rst_n) wsa_valid == esa_valid);

endmodule
