// lsb_comparator: the error detection circuit of one column.
//
// Takes the column's ADC_BITS code obtained under the test vector, keeps its
// RED_BITS least-significant bits and compares them with the pre-calculated
// reference bits: equal means no error detected, unequal flags the column as
// faulty. Purely combinational.
//
// Ports: code (ADC code), ref_lsbs (stored reference), equal, fault (= !equal).
// Follows the scheme's per-column 4-bit equality comparator directly.
module lsb_comparator
  import reram_pkg::*;
#(
  parameter int unsigned ADC_BITS = ADC_BITS_DEF,
  parameter int unsigned RED_BITS = RED_BITS_DEF
) (
  input  logic [ADC_BITS-1:0] code,
  input  logic [RED_BITS-1:0] ref_lsbs,
  output logic                equal,
  output logic                fault
);

  initial begin
    if (RED_BITS > ADC_BITS) $fatal(1, "lsb_comparator: RED_BITS exceeds ADC_BITS");
  end

  assign equal = (code[RED_BITS-1:0] == ref_lsbs);
  assign fault = !equal;

endmodule
