// cim_array: behavioural model of one SRAM compute-in-memory array.
//
// This is a behavioural model of a mixed-signal macro: in silicon the column
// sums are formed as bit-line currents and digitised by one ADC per column.
// Here the same result is computed exactly in logic, so the model is also
// synthesizable, but it stands for the analog array and says nothing about
// its circuits.
//
// Each cell holds one bit; 1 stands for weight +1 and 0 for weight -1 (the
// paper's weight pool and error terms are binary +1/-1).  Every cycle with
// in_valid, one bit plane of the input vector (bit b of every row's
// activation) drives the word lines; column c then yields
//     sum over rows r with in_bits[r]=1 of (w[r][c] ? +1 : -1)
// which the column's ADC_W-bit ADC delivers, saturated to the signed ADC range,
// on adc_out one cycle later (adc_valid).  An ideal, linear ADC is this
// design's assumption; the paper only says an 8-bit ADC is used per column.
//
// Rows are written one at a time through the wr_* port (the error array is
// rewritten for every tile; the weight pool is written once).  A write and a
// compute in the same cycle see the old row contents.
module cim_array #(
  parameter int unsigned ROWS  = cimpool_pkg::ROWS,
  parameter int unsigned COLS  = cimpool_pkg::COLS,
  parameter int unsigned ADC_W = cimpool_pkg::ADC_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // row write port
  input  logic                          wr_en,
  input  logic [$clog2(ROWS)-1:0]       wr_row,
  input  logic [COLS-1:0]               wr_data,
  // bit-serial compute
  input  logic                          in_valid,
  input  logic [ROWS-1:0]               in_bits,
  output logic                          adc_valid,
  output logic signed [ADC_W-1:0]       adc_out [COLS]
);

  localparam int SUM_W = $clog2(ROWS + 1) + 1;
  localparam int ADC_MAX = (1 << (ADC_W - 1)) - 1;
  localparam int ADC_MIN = -(1 << (ADC_W - 1));

  logic [COLS-1:0] cells [ROWS];

  always_ff @(posedge clk) begin
    if (wr_en) cells[wr_row] <= wr_data;
  end

  // column sums of the current bit plane, one adder tree and ADC per column
  logic signed [ADC_W-1:0] adc_next [COLS];
  for (genvar c = 0; c < COLS; c++) begin : g_col
    logic signed [SUM_W-1:0] s;
    always_comb begin
      s = '0;
      for (int r = 0; r < ROWS; r++) begin
        if (in_bits[r]) s = cells[r][c] ? s + SUM_W'(1) : s - SUM_W'(1);
      end
      if (32'(s) > ADC_MAX)      adc_next[c] = ADC_W'(ADC_MAX);
      else if (32'(s) < ADC_MIN) adc_next[c] = ADC_W'(ADC_MIN);
      else                       adc_next[c] = ADC_W'(s);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      adc_valid <= 1'b0;
      for (int c = 0; c < COLS; c++) adc_out[c] <= '0;
    end else begin
      adc_valid <= in_valid;
      if (in_valid) adc_out <= adc_next;
    end
  end

endmodule
