// tb_hw_scheduler: checks the hardware scheduler at its default size (128
// columns, groups of 32, 8-bit serial inputs, K = 4 vectors per bank).
// Random in-group permutations are loaded as indices; 10 vectors arrive at
// the full rate of one per 8 cycles, then flush releases the partly filled
// last bank.  Every (vector, filter) output must appear exactly once and
// equal in[v][g*32 + idx[f]].  Also checked: the first permuted output
// follows (K-1)*8 + 2 cycles after the first vector (4 input cycles of buffer
// filling), the permutation of a bank takes 32 cycles, and no overflow.
module tb_hw_scheduler;
  localparam int C = 128, GS = 32, AB = 8, K = 4, NG = 4, NV = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic idx_load = 0, in_valid = 0, flush = 0;
  logic [4:0] idx_in [C];
  logic signed [7:0] in_data [C];
  logic wr_bank, out_valid, out_bank, out_last, busy, overflow;
  logic [1:0] wr_slot;
  logic [4:0] out_t;
  logic [K-1:0] out_mask;
  logic signed [7:0] out_data [K][NG];
  int checks = 0, failures = 0;
  int vin [NV][C];
  int idx [C];
  int seen [NV][C];
  int cyc = 0, t_first_in = -1, t_first_out = -1, blk = 0, n_valid_cycles = 0;

  hw_scheduler dut (.*);

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // collect outputs
  always @(posedge clk) if (rst_n && out_valid) begin
    if (t_first_out < 0) t_first_out = cyc;
    n_valid_cycles++;
    for (int k = 0; k < K; k++) if (out_mask[k]) begin
      for (int g = 0; g < NG; g++) begin
        int v, f;
        v = blk * K + k;
        f = g * GS + int'(out_t);
        checks++;
        if (v >= NV) begin failures++; $display("FAIL vector %0d out of range", v); end
        else begin
          seen[v][f]++;
          if (int'(out_data[k][g]) != vin[v][g * GS + idx[f]]) begin
            failures++;
            if (failures < 10) $display("FAIL v=%0d f=%0d got %0d expected %0d", v, f, out_data[k][g], vin[v][g * GS + idx[f]]);
          end
        end
      end
    end
    if (out_last) blk++;
  end

  initial begin
    for (int c = 0; c < C; c++) begin idx_in[c] = '0; in_data[c] = '0; end
    for (int v = 0; v < NV; v++) for (int c = 0; c < C; c++) seen[v][c] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int g = 0; g < NG; g++) begin
      int perm [GS];
      for (int i = 0; i < GS; i++) perm[i] = i;
      for (int i = GS - 1; i > 0; i--) begin
        int j, tmp;
        j = $urandom_range(i, 0); tmp = perm[i]; perm[i] = perm[j]; perm[j] = tmp;
      end
      for (int i = 0; i < GS; i++) begin idx[g * GS + i] = perm[i]; idx_in[g * GS + i] = 5'(perm[i]); end
    end
    @(negedge clk); idx_load = 1;
    @(negedge clk); idx_load = 0;
    for (int v = 0; v < NV; v++) begin
      for (int c = 0; c < C; c++) begin vin[v][c] = $signed(8'($urandom)); in_data[c] = 8'(vin[v][c]); end
      in_valid = 1;
      if (t_first_in < 0) t_first_in = cyc;
      @(negedge clk); in_valid = 0;
      repeat (AB - 1) @(negedge clk);
    end
    flush = 1;
    @(negedge clk); flush = 0;
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    for (int v = 0; v < NV; v++) for (int c = 0; c < C; c++) begin
      checks++;
      if (seen[v][c] != 1) begin failures++; if (failures < 10) $display("FAIL v=%0d f=%0d seen %0d times", v, c, seen[v][c]); end
    end
    checks++;
    if (t_first_out - t_first_in != (K - 1) * AB + 2) begin
      failures++; $display("FAIL fill latency %0d", t_first_out - t_first_in);
    end
    checks++;
    if (n_valid_cycles != 3 * GS) begin failures++; $display("FAIL %0d permutation cycles for 3 banks", n_valid_cycles); end
    checks++;
    if (overflow) begin failures++; $display("FAIL overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
