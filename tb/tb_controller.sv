// tb_controller: checks the tile sequencer at its default sizes (64 error
// rows, 1024 tiles) against a small model of the datapath: the input buffer
// holds one waiting word and frees it 8 cycles later, each word leaves the
// shift-and-add units 12 cycles after it was read, and the accumulator
// finishes a pixel 40 cycles after that.  Checked: one index read of the
// commanded tile and its load pulse one cycle later; 64 error-row reads at
// tile*64 + r, each followed by erow_valid with the row number; n_pix input
// reads at in_base + p*in_stride, none before the error rows; one flush after
// the last shift-and-add output; done once, only after the last pixel.
module tb_controller;
  localparam int ER = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_valid = 0, cmd_ready, done, start;
  cimpool_pkg::tile_cmd_t cmd, cfg;
  cimpool_pkg::ctrl_state_e state;
  logic idx_rd_en, idx_load, err_rd_en, erow_valid, act_rd_en, ib_ld_valid, sched_flush;
  logic [9:0] idx_rd_addr;
  logic [15:0] err_rd_addr;
  logic [5:0] erow_addr;
  logic [13:0] act_rd_addr;
  logic ib_ready, sa_valid;
  logic [15:0] acc_n_done;
  int checks = 0, failures = 0, cyc = 0;

  controller dut (.*);

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // datapath model
  int busy_until = 0;
  int sa_times [$];
  int done_times [$];
  int n_sa = 0, n_acc = 0;
  assign ib_ready = (cyc >= busy_until);
  assign sa_valid = (sa_times.size() > 0) && (sa_times[0] == cyc);
  assign acc_n_done = 16'(n_acc);
  always @(posedge clk) if (rst_n) begin
    if (ib_ld_valid) begin busy_until = cyc + 8; sa_times.push_back(cyc + 12); end
    if (sa_valid) begin void'(sa_times.pop_front()); n_sa++; done_times.push_back(cyc + 40); end
    if (done_times.size() > 0 && done_times[0] == cyc) begin void'(done_times.pop_front()); n_acc++; end
    if (start) begin n_sa = 0; n_acc = 0; end
  end

  // sequence checker
  int n_idx, n_err, n_act, n_flush, n_done, last_err_cyc, first_act_cyc, prev_idx_rd, prev_err_rd;
  logic [5:0] prev_row;
  cimpool_pkg::tile_cmd_t tc;
  always @(posedge clk) if (rst_n) begin
    if (idx_rd_en) begin n_idx++; checks++; if (int'(idx_rd_addr) != int'(tc.tile)) failures++; end
    checks++; if (idx_load != prev_idx_rd) failures++;
    prev_idx_rd = idx_rd_en;
    if (err_rd_en) begin
      checks++;
      if (int'(err_rd_addr) != int'(tc.tile) * ER + n_err) begin failures++; $display("FAIL err addr %0d", err_rd_addr); end
      n_err++; last_err_cyc = cyc;
    end
    checks++;
    if (erow_valid != prev_err_rd || (erow_valid && erow_addr != prev_row)) begin failures++; $display("FAIL erow"); end
    prev_err_rd = err_rd_en; prev_row = 6'(n_err - 1);
    if (act_rd_en) begin
      checks++;
      if (int'(act_rd_addr) != int'(tc.in_base) + n_act * int'(tc.in_stride)) begin failures++; $display("FAIL act addr %0d", act_rd_addr); end
      if (first_act_cyc < 0) first_act_cyc = cyc;
      n_act++;
    end
    if (sched_flush) begin
      n_flush++; checks++;
      if (n_sa != int'(tc.n_pix)) begin failures++; $display("FAIL flush before the last vector"); end
    end
    if (done) begin
      n_done++; checks++;
      if (n_acc != int'(tc.n_pix)) begin failures++; $display("FAIL done before the last pixel"); end
    end
  end

  task automatic run(input int tile, input int n_pix, input int base, input int stride);
    tc = '0; tc.tile = 16'(tile); tc.n_pix = 16'(n_pix); tc.in_base = 16'(base); tc.in_stride = 16'(stride);
    n_idx = 0; n_err = 0; n_act = 0; n_flush = 0; n_done = 0; first_act_cyc = -1;
    @(negedge clk);
    checks++; if (!cmd_ready) failures++;
    cmd = tc; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    while (!done) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++; if (n_idx != 1) begin failures++; $display("FAIL %0d index reads", n_idx); end
    checks++; if (n_err != ER) begin failures++; $display("FAIL %0d error reads", n_err); end
    checks++; if (n_act != n_pix) begin failures++; $display("FAIL %0d input reads", n_act); end
    checks++; if (first_act_cyc <= last_err_cyc) begin failures++; $display("FAIL input read before error rows"); end
    checks++; if (n_flush != 1) begin failures++; $display("FAIL %0d flushes", n_flush); end
    checks++; if (n_done != 1) begin failures++; $display("FAIL %0d done pulses", n_done); end
    checks++; if (cfg != tc) begin failures++; $display("FAIL cfg"); end
  endtask

  initial begin
    cmd = '0; prev_idx_rd = 0; prev_err_rd = 0; prev_row = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    run(5, 9, 100, 1);
    run(1000, 3, 7, 4);
    run(0, 1, 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
