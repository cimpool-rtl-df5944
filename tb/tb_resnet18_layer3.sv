// tb_resnet18_layer3: one real convolution layer run through cimpool_top at
// its default sizes (no parameter overrides).
//
// The layer is a 3 x 3, stride-1, zero-padded convolution with 256 input and
// 256 output channels, as in the third stage of ResNet-18, on the 2 x 2
// feature map that stage has for a 32 x 32 (CIFAR) image.  One block of 128
// output filters is computed.  It takes ceil(256/128) x 9 = 18 tiles (two
// input-channel blocks times nine kernel positions); every output pixel's
// partial sum is accumulated over all 18.
//
// Layout chosen for the test: input-channel block b is stored as a 4 x 4
// grid (the 2 x 2 map with its one-pixel zero border) at activation words
// 16*b .. 16*b+15, row-major.  For output row y, tile t = 9*b + 3*dy + dx
// reads the two words 16*b + 4*(y+dy) + dx and the next one, so each tile is
// issued once per output row (n_pix = 2, stride 1); the two rows keep their
// partial sums at words 0-1 and 2-3.  The 18th tile of a row applies ReLU
// and requantisation and stores the row at words 100-101 / 102-103.
//
// Every partial sum after every tile and every stored activation is compared
// with the reference model of tb_cimpool_body.svh.  Also checked: 36 error
// reloads (one per command), at least one partly filled scheduler bank
// flushed per command (two pixels never fill a 4-vector bank, so every bank
// here is launched by the flush), the one-pixel-per-input-cycle tile time and
// no overflow.  Buffer-filling latency, pooling and channel padding are
// covered by tb_cimpool_full and tb_cimpool_top, not here.
module tb_resnet18_layer3;
  localparam int R = cimpool_pkg::ROWS, C = cimpool_pkg::COLS, GS = cimpool_pkg::GROUP_SIZE;
  localparam int AB = cimpool_pkg::ACT_BITS, ER = cimpool_pkg::ERR_ROWS;
  localparam int TD = cimpool_pkg::TILE_DEPTH, AD = cimpool_pkg::ACT_DEPTH;
  localparam int PD = cimpool_pkg::PSUM_DEPTH;
  localparam int C_IN = 256, KS = 3, HW = 2, PADW = HW + 2;
  localparam int N_BLK = C_IN / R;
  localparam int N_TILES_RUN = N_BLK * KS * KS;

  `include "tb_cimpool_body.svh"

  cimpool_top dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // padded input map of block b: border words are zero, inner words random
  task automatic load_padded_map(input int b);
    for (int y = 0; y < PADW; y++)
      for (int x = 0; x < PADW; x++) begin
        int a = PADW * PADW * b + PADW * y + x;
        bit border = (y == 0 || x == 0 || y == PADW - 1 || x == PADW - 1);
        for (int r = 0; r < R; r++) begin
          m_act[a][r] = border ? 0 : $urandom_range(255, 0);
          host_act_wr_data[r] = 8'(m_act[a][r]);
        end
        @(negedge clk); host_act_wr_en = 1; host_act_wr_addr = AAW'(a);
        @(negedge clk); host_act_wr_en = 0;
      end
  endtask

  int n_cmds;

  initial begin
    for (int r = 0; r < R; r++) host_act_wr_data[r] = '0;
    for (int c = 0; c < C; c++) idx_wr_data[c] = '0;
    cmd = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_weight_pool();
    for (int t = 0; t < N_TILES_RUN; t++) load_tile(t);
    for (int b = 0; b < N_BLK; b++) load_padded_map(b);
    n_cmds = 0;
    for (int y = 0; y < HW; y++)
      for (int t = 0; t < N_TILES_RUN; t++) begin
        automatic int b  = t / (KS * KS);
        automatic int dy = (t % (KS * KS)) / KS;
        automatic int dx = t % KS;
        automatic int in_base = PADW * PADW * b + PADW * (y + dy) + dx;
        //            tile n_pix base     str psum    out        chan first      last                  sash mw me s ash pool
        run_tile(mk(t,   HW,   in_base, 1,  HW * y, 100 + HW * y, R, t == 0, t == N_TILES_RUN - 1, 8,   2, 1, 2, 6, 1));
        check_psums(HW * y, HW);
        n_cmds++;
      end
    check_outputs();

    checks++; if (overflow) begin failures++; $display("FAIL scheduler overflow"); end
    checks++;
    if (n_err_reload != n_cmds) begin
      failures++; $display("FAIL %0d error reloads for %0d tiles", n_err_reload, n_cmds);
    end
    checks++;
    if (n_flush < n_cmds) begin
      failures++; $display("FAIL %0d partial-bank flushes for %0d tiles", n_flush, n_cmds);
    end
    $display("layer: %0d tile commands, error reloads=%0d partial-bank flushes=%0d accumulations=%0d adc saturations=%0d s&a saturations=%0d",
             n_cmds, n_err_reload, n_flush, n_accum, n_adc_sat, n_sa_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
