// redundancy_store: the pre-calculated LSBs, RED_BITS per column (4 by
// default).
//
// When a crossbar has been programmed, the test vector is applied once to the
// fault-free array and the RED_BITS least-significant bits of every column's
// ADC code are kept here as that column's reference. Two write paths:
//   * cal_we: all columns at once, from the captured ADC codes (the
//     calibration that follows programming);
//   * wr_en / wr_col / wr_lsbs: one column from outside, for reference values
//     computed off-line from the weights.
// A calibration write takes precedence over a single-column write in the
// same cycle. Contents are held in a plain array with no reset (it is
// rewritten whenever the crossbar is programmed); ref_lsbs reads all columns
// combinationally.
// Storing a few LSBs per column follows the scheme; the two write paths are
// this design's choice.
module redundancy_store
  import reram_pkg::*;
#(
  parameter int unsigned COLS     = COLS_DEF,
  parameter int unsigned ADC_BITS = ADC_BITS_DEF,
  parameter int unsigned RED_BITS = RED_BITS_DEF
) (
  input  logic                          clk,
  input  logic                          cal_we,
  input  logic [COLS-1:0][ADC_BITS-1:0] cal_codes,
  input  logic                          wr_en,
  input  logic [$clog2(COLS)-1:0]       wr_col,
  input  logic [RED_BITS-1:0]           wr_lsbs,
  output logic [COLS-1:0][RED_BITS-1:0] ref_lsbs
);

  logic [RED_BITS-1:0] mem [COLS];

  always_ff @(posedge clk) begin
    if (cal_we) begin
      for (int c = 0; c < COLS; c++) mem[c] <= cal_codes[c][RED_BITS-1:0];
    end else if (wr_en) begin
      mem[wr_col] <= wr_lsbs;
    end
  end

  always_comb begin
    for (int c = 0; c < COLS; c++) ref_lsbs[c] = mem[c];
  end

endmodule
