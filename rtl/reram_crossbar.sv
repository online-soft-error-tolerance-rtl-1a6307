// reram_crossbar: behavioural model of a ROWS x COLS 1T1R ReRAM crossbar
// (analog array, not synthesised as such).
//
// Each cell holds a conductance level 0 .. 2**G_BITS-1 (0 = high-resistance
// state, top level = low-resistance state). The bitline current of column j is
// the Kirchhoff sum of the cell currents, i_bl[j] = sum_i v_wl[i] * g[i][j]
// (Ohm's law per cell), evaluated combinationally, which is the in-situ analog
// multiply-accumulate.
//
// Programming is column-wise: while wr_en is high, every cell of column wr_col
// takes its level from wr_data (row i in bits [i*G_BITS +: G_BITS]).
// Fault injection models runtime errors: inj_en sets cell (inj_row, inj_col)
// to inj_level. With inj_stuck low this is a soft error: the next write of
// the column restores the cell. With inj_stuck high the cell becomes stuck at
// that level (a hard fault such as SA0 / SA1) and ignores all later writes
// until reset. Injection wins over a write of the same cell in the same cycle.
// Reset clears only the stuck flags; stored levels are non-volatile and are
// not reset.
//
// The summation law and the 1T1R organisation follow the scheme; level count,
// the column-write port and the injection port are this model's choices.
module reram_crossbar
  import reram_pkg::*;
#(
  parameter int unsigned ROWS   = ROWS_DEF,
  parameter int unsigned COLS   = COLS_DEF,
  parameter int unsigned G_BITS = G_BITS_DEF
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // column programming
  input  logic                       wr_en,
  input  logic [$clog2(COLS)-1:0]    wr_col,
  input  logic [ROWS*G_BITS-1:0]     wr_data,
  // fault injection
  input  logic                       inj_en,
  input  logic [$clog2(ROWS)-1:0]    inj_row,
  input  logic [$clog2(COLS)-1:0]    inj_col,
  input  logic [G_BITS-1:0]          inj_level,
  input  logic                       inj_stuck,
  // analog MVM
  input  logic [ROWS-1:0][V_W-1:0]   v_wl,
  output logic [COLS-1:0][I_W-1:0]   i_bl
);

  logic [G_BITS-1:0] g     [ROWS][COLS];
  logic              stuck [ROWS][COLS];

  always_ff @(posedge clk) begin
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < COLS; c++) begin
        if (inj_en && r == int'(inj_row) && c == int'(inj_col)) begin
          g[r][c] <= inj_level;
        end else if (wr_en && c == int'(wr_col) && !stuck[r][c]) begin
          g[r][c] <= wr_data[r*G_BITS +: G_BITS];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++)
          stuck[r][c] <= 1'b0;
    end else if (inj_en && inj_stuck) begin
      stuck[inj_row][inj_col] <= 1'b1;
    end
  end

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      logic [I_W-1:0] acc;
      acc = '0;
      for (int r = 0; r < ROWS; r++) begin
        logic [V_W+G_BITS-1:0] cell_i;   // Ohm's law: I = V * G
        cell_i = v_wl[r] * g[r][c];
        acc    = acc + I_W'(cell_i);
      end
      i_bl[c] = acc;
    end
  end

endmodule
