// shift_add: per-column shift-and-add (S & A) of bit-serial CIM outputs.
//
// Activations enter the CIM arrays one bit plane per cycle, most significant
// bit first, for ACT_BITS cycles (one "input cycle").  For every column this
// block forms  acc = 2*acc + adc  over those cycles, which equals
// sum_b adc_b * 2^b for unsigned activations.  The full-precision sum is then
// shifted right arithmetically by the run-time value shift and saturated to
// OUT_W signed bits, the width the paper assumes for a CIM output when it
// sizes the scheduler's output buffer.  out_valid pulses for one cycle, the
// cycle after the last bit plane's ADC value arrives.
//
// The bit count restarts at reset and after every ACT_BITS valid inputs, so
// the block needs no framing signal.  MSB-first order, the shift and the
// saturation are this design's choices; the paper only says the CIM outputs
// of the bits are accumulated by a shift-and-add module before the buffer.
module shift_add #(
  parameter int unsigned COLS     = cimpool_pkg::COLS,
  parameter int unsigned ADC_W    = cimpool_pkg::ADC_W,
  parameter int unsigned ACT_BITS = cimpool_pkg::ACT_BITS,
  parameter int unsigned OUT_W    = cimpool_pkg::OUT_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [3:0]               shift,
  input  logic                     in_valid,
  input  logic signed [ADC_W-1:0]  in_adc [COLS],
  output logic                     out_valid,
  output logic signed [OUT_W-1:0]  out_data [COLS]
);

  localparam int ACC_W   = ADC_W + ACT_BITS + 1;
  localparam int OUT_MAX = (1 << (OUT_W - 1)) - 1;
  localparam int OUT_MIN = -(1 << (OUT_W - 1));
  localparam int CNT_W   = (ACT_BITS > 1) ? $clog2(ACT_BITS) : 1;

  logic [CNT_W-1:0]        bit_cnt;
  logic signed [ACC_W-1:0] acc [COLS];
  logic signed [ACC_W-1:0] acc_next [COLS];
  logic signed [OUT_W-1:0] sat_next [COLS];
  logic                    last_bit;

  assign last_bit = (bit_cnt == CNT_W'(ACT_BITS - 1));

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      logic signed [ACC_W-1:0] sh;
      acc_next[c] = ((bit_cnt == '0) ? ACC_W'(0) : (acc[c] <<< 1)) + ACC_W'(in_adc[c]);
      sh = acc_next[c] >>> shift;
      if (32'(sh) > OUT_MAX)      sat_next[c] = OUT_W'(OUT_MAX);
      else if (32'(sh) < OUT_MIN) sat_next[c] = OUT_W'(OUT_MIN);
      else                           sat_next[c] = OUT_W'(sh);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bit_cnt   <= '0;
      out_valid <= 1'b0;
      for (int c = 0; c < COLS; c++) begin
        acc[c]      <= '0;
        out_data[c] <= '0;
      end
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        acc     <= acc_next;
        bit_cnt <= last_bit ? '0 : bit_cnt + 1'b1;
        if (last_bit) begin
          out_valid <= 1'b1;
          out_data  <= sat_next;
        end
      end
    end
  end

endmodule
