// digital_value_buffer: the register row that holds the digitised bitline
// outputs.
//
// On a clock edge with capture high, every column's ADC code is stored. The
// stored codes feed both the error detection comparators (after the test
// vector) and the tile's result output (after the input vector). Codes are
// valid from the cycle after the capture until the next capture; reset
// clears them.
//
// Ports: capture, adc_code[c] (ADC output of column c), codes[c].
// The buffer between the ADCs and the detection circuit follows the scheme's
// block diagram; its single capture strobe is this design's choice.
module digital_value_buffer
  import reram_pkg::*;
#(
  parameter int unsigned COLS     = COLS_DEF,
  parameter int unsigned ADC_BITS = ADC_BITS_DEF
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          capture,
  input  logic [COLS-1:0][ADC_BITS-1:0] adc_code,
  output logic [COLS-1:0][ADC_BITS-1:0] codes
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       codes <= '0;
    else if (capture) codes <= adc_code;
  end

endmodule
