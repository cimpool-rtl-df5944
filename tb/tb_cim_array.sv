// tb_cim_array: checks the CIM array model at its default 128 x 128 size.
// Random +1/-1 cells and random bit planes are compared with column sums
// computed here; two columns forced to all +1 and all -1 with every word line
// on check the 8-bit ADC saturation (+128 -> 127, -128 stays -128).  Also
// checks the one-cycle latency of adc_valid.
module tb_cim_array;
  localparam int R = 128, C = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, in_valid = 0, adc_valid;
  logic [$clog2(R)-1:0] wr_row = '0;
  logic [C-1:0] wr_data = '0;
  logic [R-1:0] in_bits = '0;
  logic signed [7:0] adc_out [C];
  bit w [R][C];
  int checks = 0, failures = 0;

  cim_array dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_plane(input logic [R-1:0] bits);
    @(negedge clk); in_bits = bits; in_valid = 1;
    @(negedge clk); in_valid = 0;
    checks++;
    if (!adc_valid) begin failures++; $display("FAIL adc_valid"); end
    for (int c = 0; c < C; c++) begin
      int s;
      s = 0;
      for (int r = 0; r < R; r++) if (bits[r]) s += w[r][c] ? 1 : -1;
      if (s > 127) s = 127;
      if (s < -128) s = -128;
      checks++;
      if (int'(adc_out[c]) != s) begin
        failures++;
        if (failures < 10) $display("FAIL col %0d: %0d expected %0d", c, adc_out[c], s);
      end
    end
    @(negedge clk);
    checks++;
    if (adc_valid) begin failures++; $display("FAIL adc_valid held"); end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < R; r++) begin
      logic [C-1:0] row;
      for (int c = 0; c < C; c++) begin
        w[r][c] = (c == 0) ? 1'b1 : (c == 1) ? 1'b0 : 1'($urandom);
        row[c] = w[r][c];
      end
      @(negedge clk); wr_en = 1; wr_row = 7'(r); wr_data = row;
    end
    @(negedge clk); wr_en = 0;
    check_plane('1);
    check_plane('0);
    for (int i = 0; i < 8; i++) check_plane({$urandom, $urandom, $urandom, $urandom});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
