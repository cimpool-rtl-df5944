// tb_cimpool_top: end-to-end test of the CIMPool core at reduced sizes.
//
// 32 x 16 weight-pool array in groups of 8, 4-bit activations, 16 error rows
// (0.5 sparsity), so K = 2 vectors per scheduler bank.  Four tiles run:
// a first (non-final) tile with a partial last bank, an accumulating final
// tile with zero-padded channels, a tile with pooling and saturating values,
// and a strided tile.  Every activation written back and the partial sums
// are compared with the reference model in tb_cimpool_body.svh.
module tb_cimpool_top;
  localparam int R = 32, C = 16, GS = 8, AB = 4, ER = 16;
  localparam int TD = 8, AD = 256, PD = 64, N_TILES_RUN = 4;

  `include "tb_cimpool_body.svh"

  cimpool_top #(.ROWS(R), .COLS(C), .GROUP_SIZE(GS), .ACT_BITS(AB), .ERR_ROWS(ER),
                .TILE_DEPTH(TD), .ACT_DEPTH(AD), .PSUM_DEPTH(PD)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
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
    load_acts(0, 40, 15);
    load_acts(40, 20, 3);
    //        tile n_pix base str psum out  chan first last sash mw me s ash pool
    run_tile(mk(0, 7,   0,  1,  0,   100, R,   1,    0,   0,   3, 2, 2, 0, 1));
    check_psums(0, 7);
    run_tile(mk(1, 7,   8,  1,  0,   100, R-5, 0,    1,   0,   1, 1, 3, 4, 1));
    check_psums(0, 7);
    check_outputs();
    run_tile(mk(2, 8,   16, 1,  10,  120, R,   1,    1,   0,   2, 1, 1, 2, 2));
    check_outputs();
    run_tile(mk(3, 5,   40, 2,  20,  130, 20,  1,    1,   1,   5, 4, 4, 3, 1));
    check_psums(20, 5);
    check_outputs();
    check_mechanisms();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
