// tb_shift_add: checks the shift-and-add unit at its default size (128
// columns, 8 bit planes).  Random ADC values are sent MSB plane first for
// several input vectors back to back; each result must equal
// sat8((sum_b adc_b * 2^b) >>> shift), appear exactly one cycle after the last
// plane, and out_valid must pulse once per ACT_BITS inputs.
module tb_shift_add;
  localparam int C = 128, AB = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0] shift = '0;
  logic in_valid = 0, out_valid;
  logic signed [7:0] in_adc [C];
  logic signed [7:0] out_data [C];
  int checks = 0, failures = 0, n_sat = 0;

  shift_add dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint acc [C];
  initial begin
    for (int c = 0; c < C; c++) in_adc[c] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int v = 0; v < 12; v++) begin
      shift = 4'(v % 10);
      for (int c = 0; c < C; c++) acc[c] = 0;
      for (int b = 0; b < AB; b++) begin
        @(negedge clk);
        in_valid = 1;
        for (int c = 0; c < C; c++) begin
          in_adc[c] = (v == 0) ? 8'sd127 : 8'($urandom);
          acc[c] = acc[c] * 2 + in_adc[c];
        end
        // no output before the vector is complete (except the previous one)
        if (b > 1) begin checks++; if (out_valid) begin failures++; $display("FAIL early out_valid"); end end
      end
      @(negedge clk); in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL missing out_valid v=%0d", v); end
      for (int c = 0; c < C; c++) begin
        longint e;
        e = acc[c] >>> shift;
        if (e > 127 || e < -128) n_sat++;
        e = (e > 127) ? 127 : (e < -128) ? -128 : e;
        checks++;
        if (longint'(out_data[c]) != e) begin
          failures++;
          if (failures < 10) $display("FAIL v=%0d c=%0d got %0d expected %0d", v, c, out_data[c], e);
        end
      end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
