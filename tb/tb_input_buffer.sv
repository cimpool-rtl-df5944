// tb_input_buffer: checks the input buffer at its default size (128 rows,
// 64 error rows, 8-bit activations).  Five activation words are offered
// whenever ld_ready is high (one cycle of read latency modelled); the bit
// planes must come out MSB first, back to back with no idle cycle between
// words, with channels >= n_chan forced to zero and error row r carrying
// channel 2r.  An error row sent through the staging path must reach the
// write port one cycle later unchanged.
module tb_input_buffer;
  localparam int R = 128, C = 128, ER = 64, AB = 8, NW = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0] n_chan = 8'd100;
  logic ld_valid = 0, ld_ready, bit_valid;
  logic [7:0] ld_data [R];
  logic [R-1:0] wp_bits;
  logic [ER-1:0] err_bits;
  logic erow_valid = 0, erow_wr_en;
  logic [5:0] erow_addr = '0, erow_wr_row;
  logic [C-1:0] erow_data = '0, erow_wr_data;
  int checks = 0, failures = 0;
  int words [NW][R];
  int n_bits = 0, first_bit = -1, last_bit = -1, cyc = 0;

  input_buffer dut (.*);

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // check every bit plane
  always @(posedge clk) if (rst_n && bit_valid) begin
    int w, b;
    w = n_bits / AB;
    b = AB - 1 - (n_bits % AB);
    if (first_bit < 0) first_bit = cyc;
    last_bit = cyc;
    for (int r = 0; r < R; r++) begin
      int e;
      e = (r < int'(n_chan)) ? (words[w][r] >> b) & 1 : 0;
      checks++;
      if (int'(wp_bits[r]) != e) begin failures++; if (failures < 10) $display("FAIL w%0d b%0d r%0d", w, b, r); end
    end
    for (int r = 0; r < ER; r++) begin
      int e;
      e = (2 * r < int'(n_chan)) ? (words[w][2 * r] >> b) & 1 : 0;
      checks++;
      if (int'(err_bits[r]) != e) begin failures++; if (failures < 10) $display("FAIL err w%0d b%0d r%0d", w, b, r); end
    end
    n_bits++;
  end

  initial begin
    for (int r = 0; r < R; r++) ld_data[r] = '0;
    for (int w = 0; w < NW; w++) for (int r = 0; r < R; r++) words[w][r] = $urandom_range(255, 0);
    repeat (2) @(negedge clk); rst_n = 1;
    // error row staging
    @(negedge clk); erow_valid = 1; erow_addr = 6'd37; erow_data = {$urandom, $urandom, $urandom, $urandom};
    @(negedge clk); erow_valid = 0;
    checks++;
    if (!erow_wr_en || erow_wr_row != 6'd37 || erow_wr_data != erow_data) begin failures++; $display("FAIL error row staging"); end
    @(negedge clk);
    checks++; if (erow_wr_en) begin failures++; $display("FAIL error row write held"); end
    // stream words
    for (int w = 0; w < NW; w++) begin
      while (!ld_ready) @(negedge clk);
      @(negedge clk);                 // SRAM read latency
      ld_valid = 1;
      for (int r = 0; r < R; r++) ld_data[r] = 8'(words[w][r]);
      @(negedge clk); ld_valid = 0;
    end
    repeat (2 * AB + 4) @(negedge clk);
    checks++;
    if (n_bits != NW * AB) begin failures++; $display("FAIL %0d bit planes", n_bits); end
    checks++;
    if (last_bit - first_bit != NW * AB - 1) begin failures++; $display("FAIL gaps: span %0d", last_bit - first_bit); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
