// tb_cimpool_full: end-to-end test of cimpool_top at its default sizes.
//
// The paper's configuration: 128 x 128 weight-pool array in 4 groups of 32,
// 8-bit bit-serial activations, 64-row error array (0.5 error sparsity), so
// the scheduler collects K = 4 vectors per bank.  Two tiles accumulate into
// the same 10 output pixels (10 is not a multiple of 4, so the last bank is
// flushed partly filled); the second uses fewer than 128 channels (zero
// padding) and pools pairs of outputs.  Results are compared with the
// reference model in tb_cimpool_body.svh.
module tb_cimpool_full;
  localparam int R = cimpool_pkg::ROWS, C = cimpool_pkg::COLS, GS = cimpool_pkg::GROUP_SIZE;
  localparam int AB = cimpool_pkg::ACT_BITS, ER = cimpool_pkg::ERR_ROWS;
  localparam int TD = cimpool_pkg::TILE_DEPTH, AD = cimpool_pkg::ACT_DEPTH;
  localparam int PD = cimpool_pkg::PSUM_DEPTH, N_TILES_RUN = 2;

  `include "tb_cimpool_body.svh"

  cimpool_top dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < R; r++) host_act_wr_data[r] = '0;
    for (int c = 0; c < C; c++) idx_wr_data[c] = '0;
    cmd = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_weight_pool();
    for (int t = 0; t < N_TILES_RUN; t++) load_tile(t);
    load_acts(0, 20, 255);
    //        tile n_pix base str psum  out   chan first last sash mw me s ash pool
    run_tile(mk(0, 10,  0,   1,  500,  9000, R,   1,    0,   3,   3, 2, 2, 0, 1));
    check_psums(500, 10);
    run_tile(mk(1, 10,  10,  1,  500,  9000, 100, 0,    1,   3,   1, 1, 3, 3, 2));
    check_psums(500, 10);
    check_outputs();
    check_mechanisms();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
