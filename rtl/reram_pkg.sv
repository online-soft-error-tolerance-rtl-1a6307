// reram_pkg: constants and types shared by the fault-tolerant ReRAM crossbar tile.
//
// The tile performs an analog matrix-vector multiplication (MVM) on a ReRAM
// crossbar and, before every MVM, applies a test vector (the maximum input
// voltage on every wordline) to check each column's ADC code against a few
// stored least-significant bits. Columns that disagree are reprogrammed from
// the known weights before the real input vector is applied.
//
// Defaults follow the main configuration of the scheme: 128x128 crossbar,
// 8-bit ADC per bitline, 4 stored LSBs per column, 0.3 V maximum input.
// DAC resolution, conductance levels per cell and write time are this
// design's own choices (the scheme does not fix them).
package reram_pkg;

  // Main configuration of the scheme.
  localparam int unsigned ROWS_DEF      = 128;     // wordlines
  localparam int unsigned COLS_DEF      = 128;     // bitlines
  localparam int unsigned ADC_BITS_DEF  = 8;       // ADC resolution
  localparam int unsigned RED_BITS_DEF  = 4;       // stored LSBs per column
  localparam int unsigned VMAX_UV_DEF   = 300_000; // maximum input voltage, microvolts

  // Choices of this design.
  localparam int unsigned DAC_BITS_DEF     = 8;    // input code width per wordline
  localparam int unsigned G_BITS_DEF       = 4;    // conductance levels per cell: 2**G_BITS
  localparam int unsigned WRITE_CYCLES_DEF = 4;    // cycles a column write pulse is held

  // Fixed widths of the analog quantities in the behavioural models.
  // A wordline voltage is carried in microvolts, a bitline current in
  // microvolt * conductance-level units.
  localparam int unsigned V_W = 20;  // up to 1.048 V
  localparam int unsigned I_W = 40;

  // Commands accepted by the tile.
  typedef enum logic [1:0] {
    CMD_NOP     = 2'd0,
    CMD_PROGRAM = 2'd1,  // write every column from the weight source, then calibrate
    CMD_MVM     = 2'd2   // test-vector check, repair, then multiply the input vector
  } cmd_e;

  // Which vector drives the wordline DACs.
  typedef enum logic [1:0] {
    VSEL_OFF   = 2'd0,   // all wordlines at 0 V
    VSEL_TEST  = 2'd1,   // test vector: maximum code on every wordline
    VSEL_INPUT = 2'd2    // the held input vector
  } vsel_e;

  // Controller states.
  typedef enum logic [3:0] {
    ST_IDLE      = 4'd0,
    ST_PROG      = 4'd1,  // all columns being written
    ST_CAL_APPLY = 4'd2,  // test vector applied to the freshly written crossbar
    ST_CAL_STORE = 4'd3,  // its LSBs written into the redundancy store
    ST_TEST      = 4'd4,  // extra cycle: test vector applied, ADC codes captured
    ST_CHECK     = 4'd5,  // LSB comparison, faulty columns handed to the repair unit
    ST_REPAIR    = 4'd6,  // faulty columns being reprogrammed
    ST_APPLY     = 4'd7,  // input vector applied, ADC codes captured
    ST_OUT       = 4'd8   // result valid
  } ctrl_state_e;

endpackage
