// error_detector: one lsb_comparator per column.
//
// All columns are checked in parallel from the buffered test-vector ADC codes
// and the stored reference LSBs. fault_vec[c] is high when column c
// mismatches, any_fault is their OR and n_faulty their count. Purely
// combinational; the controller samples it in its CHECK cycle.
//
// Ports: codes[c], ref_lsbs[c], fault_vec, any_fault, n_faulty.
// The per-column comparator array follows the scheme; the OR and the count
// are this design's additions for control and statistics.
module error_detector
  import reram_pkg::*;
#(
  parameter int unsigned COLS     = COLS_DEF,
  parameter int unsigned ADC_BITS = ADC_BITS_DEF,
  parameter int unsigned RED_BITS = RED_BITS_DEF
) (
  input  logic [COLS-1:0][ADC_BITS-1:0] codes,
  input  logic [COLS-1:0][RED_BITS-1:0] ref_lsbs,
  output logic [COLS-1:0]               fault_vec,
  output logic                          any_fault,
  output logic [$clog2(COLS+1)-1:0]     n_faulty
);

  for (genvar c = 0; c < COLS; c++) begin : g_col
    lsb_comparator #(.ADC_BITS(ADC_BITS), .RED_BITS(RED_BITS)) u_cmp (
      .code     (codes[c]),
      .ref_lsbs (ref_lsbs[c]),
      .equal    (),
      .fault    (fault_vec[c])
    );
  end

  assign any_fault = |fault_vec;

  always_comb begin
    n_faulty = '0;
    for (int c = 0; c < COLS; c++) n_faulty = n_faulty + {{($clog2(COLS+1)-1){1'b0}}, fault_vec[c]};
  end

endmodule
