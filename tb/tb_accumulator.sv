// tb_accumulator: checks the accumulator at its default size (128 filters,
// groups of 32, K = 4).  Six error vectors are written into the ping-pong
// buffer (bank 0 slots 0-3, bank 1 slots 0-1) and the matching permuted
// weight-pool outputs are delivered as the scheduler does: 32 steps per
// bank, four filters per vector per step.  The partial-sum memory is modelled
// here with one cycle of read latency and random old contents.  Each pixel p
// must be written at psum_base + p with old + mav_w*wp + s_err*mav_e*err, or
// without the old value on a first tile, and be offered as a result on a last
// tile; n_done must count all six.
module tb_accumulator;
  localparam int C = 128, GS = 32, K = 4, NG = 4, NP = 6, PW = 24;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, first = 0, last = 1;
  logic [13:0] psum_base = 14'd10;
  logic [7:0] mav_w = 8'd3, mav_e = 8'd2;
  logic [2:0] s_err = 3'd3;
  logic [15:0] n_done;
  logic err_valid = 0, err_bank = 0;
  logic signed [7:0] err_data [C];
  logic [1:0] err_slot = '0;
  logic wp_valid = 0, wp_bank = 0, wp_last = 0;
  logic [4:0] wp_t = '0;
  logic [K-1:0] wp_mask = '0;
  logic signed [7:0] wp_data [K][NG];
  logic ps_rd_en, ps_wr_en, res_valid;
  logic [13:0] ps_rd_addr, ps_wr_addr;
  logic signed [PW-1:0] ps_rd_data [C];
  logic signed [PW-1:0] ps_wr_data [C];
  logic signed [PW-1:0] res_data [C];
  int checks = 0, failures = 0, n_wr = 0, n_res = 0;
  int wp [NP][C], er [NP][C];
  longint mem [64][C];
  longint exp_mem [64][C];

  accumulator dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // partial-sum memory model (outputs are only meaningful after reset)
  always @(posedge clk) if (rst_n) begin
    if (ps_rd_en) for (int c = 0; c < C; c++) ps_rd_data[c] <= PW'(mem[ps_rd_addr][c]);
    if (ps_wr_en) begin
      n_wr++;
      for (int c = 0; c < C; c++) begin
        mem[ps_wr_addr][c] = longint'(ps_wr_data[c]);
        checks++;
        if (longint'(ps_wr_data[c]) != exp_mem[ps_wr_addr][c]) begin
          failures++;
          if (failures < 10) $display("FAIL addr %0d f %0d got %0d expected %0d", ps_wr_addr, c, ps_wr_data[c], exp_mem[ps_wr_addr][c]);
        end
      end
    end
    if (res_valid) begin
      n_res++;
      checks++;
      if (res_data[5] != ps_wr_data[5]) begin failures++; $display("FAIL result differs from written sum"); end
    end
  end

  task automatic run(input bit is_first);
    first = is_first;
    for (int p = 0; p < NP; p++)
      for (int c = 0; c < C; c++) begin
        wp[p][c] = $signed(8'($urandom)); er[p][c] = $signed(8'($urandom));
        exp_mem[10 + p][c] = (is_first ? 0 : mem[10 + p][c]) + 3 * wp[p][c] + 6 * er[p][c];
      end
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    // error vectors arrive with their weight-pool twins
    for (int p = 0; p < NP; p++) begin
      err_valid = 1; err_bank = p / K; err_slot = 2'(p % K);
      for (int c = 0; c < C; c++) err_data[c] = 8'(er[p][c]);
      @(negedge clk);
    end
    err_valid = 0;
    // permuted outputs, bank by bank
    for (int b = 0; b < 2; b++) begin
      for (int t = 0; t < GS; t++) begin
        wp_valid = 1; wp_bank = 1'(b); wp_t = 5'(t); wp_last = (t == GS - 1);
        wp_mask = (b == 0) ? 4'b1111 : 4'b0011;
        for (int k = 0; k < K; k++)
          for (int g = 0; g < NG; g++)
            wp_data[k][g] = (b * K + k < NP) ? 8'(wp[b * K + k][g * GS + t]) : 8'sd0;
        @(negedge clk);
      end
      wp_valid = 0; wp_last = 0;
      repeat (2) @(negedge clk);
    end
    repeat (10) @(negedge clk);
    checks++;
    if (n_done != 16'(NP)) begin failures++; $display("FAIL n_done %0d", n_done); end
  endtask

  initial begin
    for (int c = 0; c < C; c++) err_data[c] = '0;
    for (int k = 0; k < K; k++) for (int g = 0; g < NG; g++) wp_data[k][g] = '0;
    for (int a = 0; a < 64; a++) for (int c = 0; c < C; c++) mem[a][c] = $signed(PW'($urandom)) >>> 4;
    repeat (2) @(negedge clk); rst_n = 1;
    run(1'b0);
    run(1'b1);
    checks++;
    if (n_wr != 2 * NP || n_res != 2 * NP) begin failures++; $display("FAIL %0d writes %0d results", n_wr, n_res); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
