// tb_act_pool: checks activation and pooling at the default size (128
// filters).  Random signed sums (some negative, some large) go through with
// pool_n = 1 and then pool_n = 2 and 4; every write must land at
// out_base + n with max over the window of sat_u8(relu(x) >>> act_shift).
module tb_act_pool;
  localparam int C = 128, PW = 24;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, in_valid = 0, act_wr_en;
  logic [13:0] out_base = '0, act_wr_addr;
  logic [4:0] act_shift = '0;
  logic [2:0] pool_n = 3'd1;
  logic signed [PW-1:0] in_data [C];
  logic [7:0] act_wr_data [C];
  int checks = 0, failures = 0, n_wr = 0, exp_wr = 0;
  int exp_q [$][C];
  int exp_a [$];

  act_pool dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && act_wr_en) begin
    checks++;
    if (int'(act_wr_addr) != exp_a[n_wr]) begin failures++; $display("FAIL addr %0d expected %0d", act_wr_addr, exp_a[n_wr]); end
    for (int c = 0; c < C; c++) begin
      checks++;
      if (int'(act_wr_data[c]) != exp_q[n_wr][c]) begin
        failures++;
        if (failures < 10) $display("FAIL wr %0d c %0d got %0d expected %0d", n_wr, c, act_wr_data[c], exp_q[n_wr][c]);
      end
    end
    n_wr++;
  end

  task automatic run(input int pn, input int shift, input int base, input int n);
    int mx [C];
    @(negedge clk);
    pool_n = 3'(pn); act_shift = 5'(shift); out_base = 14'(base); start = 1;
    @(negedge clk); start = 0;
    for (int i = 0; i < n; i++) begin
      for (int c = 0; c < C; c++) begin
        int v, q;
        v = $signed(PW'($urandom)) >>> ($urandom_range(14, 4));
        in_data[c] = PW'(v);
        q = (v < 0) ? 0 : ((v >>> shift) > 255 ? 255 : (v >>> shift));
        if (i % pn == 0 || q > mx[c]) mx[c] = q;
      end
      if (i % pn == pn - 1) begin
        exp_q.push_back(mx);
        exp_a.push_back(base + i / pn);
        exp_wr++;
      end
      in_valid = 1;
      @(negedge clk); in_valid = 0;
      if (i % 3 == 1) @(negedge clk);
    end
    repeat (3) @(negedge clk);
  endtask

  initial begin
    for (int c = 0; c < C; c++) in_data[c] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    run(1, 0, 5, 6);
    run(2, 3, 40, 8);
    run(4, 6, 100, 8);
    checks++;
    if (n_wr != exp_wr) begin failures++; $display("FAIL %0d writes, expected %0d", n_wr, exp_wr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
