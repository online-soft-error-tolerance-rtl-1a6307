// reprogram_unit: rewrites the conductances of selected crossbar columns
// from the known weights.
//
// start loads a column mask (the faulty columns found by the test vector, or
// all ones for the initial programming) and the unit then walks the mask from
// the lowest column index up. For each selected column it
//   1. requests that column's weights from the weight source: wt_req is held
//      high with wt_col until the source answers with wt_valid and wt_data
//      (any number of cycles later, also in the same cycle);
//   2. holds the crossbar write port (xb_wr_en, xb_wr_col, xb_wr_data) for
//      WRITE_CYCLES cycles, the programming pulse time.
// done pulses for one cycle when the mask is empty (also right after a start
// with an empty mask); busy is high from start to done. cols_written counts
// the columns rewritten since reset.
// Timing per column: one request cycle plus the weight source's wait, then
// WRITE_CYCLES write cycles.
//
// Reprogramming of the faulty columns from the known weights follows the
// scheme; the column order, weight handshake and fixed pulse time are this
// design's choices.
module reprogram_unit
  import reram_pkg::*;
#(
  parameter int unsigned ROWS         = ROWS_DEF,
  parameter int unsigned COLS         = COLS_DEF,
  parameter int unsigned G_BITS       = G_BITS_DEF,
  parameter int unsigned WRITE_CYCLES = WRITE_CYCLES_DEF
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [COLS-1:0]            mask,
  output logic                       busy,
  output logic                       done,
  // weight source
  output logic                       wt_req,
  output logic [$clog2(COLS)-1:0]    wt_col,
  input  logic                       wt_valid,
  input  logic [ROWS*G_BITS-1:0]     wt_data,
  // crossbar write port
  output logic                       xb_wr_en,
  output logic [$clog2(COLS)-1:0]    xb_wr_col,
  output logic [ROWS*G_BITS-1:0]     xb_wr_data,
  output logic [31:0]                cols_written
);

  localparam int unsigned CW = $clog2(COLS);
  localparam int unsigned WCW = $clog2(WRITE_CYCLES + 1);

  typedef enum logic [1:0] {RP_IDLE, RP_NEXT, RP_REQ, RP_WRITE} rp_state_e;

  rp_state_e             state;
  logic [COLS-1:0]       pending;
  logic [CW-1:0]         col;
  logic [ROWS*G_BITS-1:0] data;
  logic [WCW-1:0]        wcnt;

  // lowest pending column
  logic [CW-1:0] first_col;
  always_comb begin
    first_col = '0;
    for (int c = COLS - 1; c >= 0; c--) begin
      if (pending[c]) first_col = CW'(c);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= RP_IDLE;
      pending      <= '0;
      col          <= '0;
      data         <= '0;
      wcnt         <= '0;
      done         <= 1'b0;
      cols_written <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        RP_IDLE: begin
          if (start) begin
            pending <= mask;
            state   <= RP_NEXT;
          end
        end
        RP_NEXT: begin
          if (pending == '0) begin
            done  <= 1'b1;
            state <= RP_IDLE;
          end else begin
            col   <= first_col;
            state <= RP_REQ;
          end
        end
        RP_REQ: begin
          if (wt_valid) begin
            data  <= wt_data;
            wcnt  <= WCW'(WRITE_CYCLES);
            state <= RP_WRITE;
          end
        end
        RP_WRITE: begin
          if (wcnt == WCW'(1)) begin
            pending[col] <= 1'b0;
            cols_written <= cols_written + 32'd1;
            state        <= RP_NEXT;
          end
          wcnt <= wcnt - WCW'(1);
        end
        default: state <= RP_IDLE;
      endcase
    end
  end

  assign busy       = (state != RP_IDLE);
  assign wt_req     = (state == RP_REQ);
  assign wt_col     = col;
  assign xb_wr_en   = (state == RP_WRITE);
  assign xb_wr_col  = col;
  assign xb_wr_data = data;

  initial begin
    if (WRITE_CYCLES < 1) $fatal(1, "reprogram_unit: WRITE_CYCLES must be at least 1");
  end

  // The weight source may only answer an open request.
  a_wt_valid_in_req: assert property (@(posedge clk) disable iff (!rst_n) wt_valid |-> wt_req);
  // A new job is only started while idle.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule
