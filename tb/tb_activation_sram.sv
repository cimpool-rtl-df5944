// tb_activation_sram: checks both banks of the activation SRAM at reduced
// depth (64 words each; width as default).  Random words are written and
// read back with one cycle of latency; a read and a write of the same word in
// one cycle must return the old word.
module tb_activation_sram;
  localparam int R = 128, C = 128, PW = 24, D = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  logic act_rd_en = 0, act_wr_en = 0, ps_rd_en = 0, ps_wr_en = 0;
  logic [5:0] act_rd_addr = '0, act_wr_addr = '0, ps_rd_addr = '0, ps_wr_addr = '0;
  logic [7:0] act_rd_data [R];
  logic [7:0] act_wr_data [R];
  logic signed [PW-1:0] ps_rd_data [C];
  logic signed [PW-1:0] ps_wr_data [C];
  int checks = 0, failures = 0;
  int am [D][R];
  int pm [D][C];

  activation_sram #(.ACT_DEPTH(D), .PSUM_DEPTH(D)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int a);
    for (int r = 0; r < R; r++) begin am[a][r] = $urandom_range(255, 0); act_wr_data[r] = 8'(am[a][r]); end
    for (int c = 0; c < C; c++) begin pm[a][c] = $signed(PW'($urandom)); ps_wr_data[c] = PW'(pm[a][c]); end
    @(negedge clk); act_wr_en = 1; ps_wr_en = 1; act_wr_addr = 6'(a); ps_wr_addr = 6'(a);
    @(negedge clk); act_wr_en = 0; ps_wr_en = 0;
  endtask

  task automatic rd_check(input int a);
    @(negedge clk); act_rd_en = 1; ps_rd_en = 1; act_rd_addr = 6'(a); ps_rd_addr = 6'(a);
    @(negedge clk); act_rd_en = 0; ps_rd_en = 0;
    for (int r = 0; r < R; r++) begin checks++; if (int'(act_rd_data[r]) != am[a][r]) failures++; end
    for (int c = 0; c < C; c++) begin checks++; if (int'(ps_rd_data[c]) != pm[a][c]) failures++; end
  endtask

  initial begin
    for (int a = 0; a < D; a++) wr(a);
    for (int i = 0; i < 40; i++) rd_check($urandom_range(D - 1, 0));
    // read-during-write returns the old word
    for (int r = 0; r < R; r++) act_wr_data[r] = 8'(am[7][r] ^ 8'hff);
    for (int c = 0; c < C; c++) ps_wr_data[c] = PW'(~pm[7][c]);
    @(negedge clk); act_rd_en = 1; ps_rd_en = 1; act_rd_addr = 6'd7; ps_rd_addr = 6'd7;
    act_wr_en = 1; ps_wr_en = 1; act_wr_addr = 6'd7; ps_wr_addr = 6'd7;
    @(negedge clk); act_rd_en = 0; ps_rd_en = 0; act_wr_en = 0; ps_wr_en = 0;
    checks++; if (int'(act_rd_data[3]) != am[7][3]) failures++;
    checks++; if (int'(ps_rd_data[3]) != pm[7][3]) failures++;
    for (int r = 0; r < R; r++) am[7][r] = am[7][r] ^ 255;
    for (int c = 0; c < C; c++) pm[7][c] = ~pm[7][c];
    rd_check(7);
    if (failures > 0) $display("FAIL %0d mismatches", failures);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
