// tb_error_index_sram: checks the index and error banks at reduced depth
// (8 tiles, default widths: 128 indices of 5 bits, 64 error rows of 128
// bits per tile).  Every word is written with random data and read back in
// random order with one cycle of latency; error row r of tile t is at word
// t*64 + r.
module tb_error_index_sram;
  localparam int C = 128, ER = 64, TD = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic idx_wr_en = 0, idx_rd_en = 0, err_wr_en = 0, err_rd_en = 0;
  logic [2:0] idx_wr_addr = '0, idx_rd_addr = '0;
  logic [4:0] idx_wr_data [C];
  logic [4:0] idx_rd_data [C];
  logic [8:0] err_wr_addr = '0, err_rd_addr = '0;
  logic [C-1:0] err_wr_data = '0, err_rd_data;
  int checks = 0, failures = 0;
  int im [TD][C];
  logic [C-1:0] em [TD * ER];

  error_index_sram #(.TILE_DEPTH(TD)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < TD; t++) begin
      for (int c = 0; c < C; c++) begin im[t][c] = $urandom_range(31, 0); idx_wr_data[c] = 5'(im[t][c]); end
      @(negedge clk); idx_wr_en = 1; idx_wr_addr = 3'(t);
      @(negedge clk); idx_wr_en = 0;
      for (int r = 0; r < ER; r++) begin
        em[t * ER + r] = {$urandom, $urandom, $urandom, $urandom};
        @(negedge clk); err_wr_en = 1; err_wr_addr = 9'(t * ER + r); err_wr_data = em[t * ER + r];
      end
      @(negedge clk); err_wr_en = 0;
    end
    for (int i = 0; i < 200; i++) begin
      int t, a;
      t = $urandom_range(TD - 1, 0);
      a = $urandom_range(TD * ER - 1, 0);
      @(negedge clk); idx_rd_en = 1; idx_rd_addr = 3'(t); err_rd_en = 1; err_rd_addr = 9'(a);
      @(negedge clk); idx_rd_en = 0; err_rd_en = 0;
      for (int c = 0; c < C; c++) begin checks++; if (int'(idx_rd_data[c]) != im[t][c]) failures++; end
      checks++; if (err_rd_data != em[a]) failures++;
    end
    if (failures > 0) $display("FAIL %0d mismatches", failures);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
