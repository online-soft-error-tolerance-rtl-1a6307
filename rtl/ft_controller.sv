// ft_controller: sequencer of the online error detection and correction.
//
// Commands are taken with a valid/ready handshake (cmd_ready is high only in
// IDLE).
//   CMD_PROGRAM: the reprogram unit writes every column from the weight
//     source (PROG); then the test vector is applied to the fresh array and
//     the ADC codes captured (CAL_APPLY), and their LSBs are written into the
//     redundancy store (CAL_STORE). prog_done pulses when this ends.
//   CMD_MVM: the input vector is loaded with the command. In the extra cycle
//     TEST the test vector drives the wordlines and the ADC codes are
//     captured; in CHECK the comparators' result is sampled. If no column
//     mismatches, the input vector is applied at once (APPLY); otherwise the
//     faulty columns are handed to the reprogram unit (REPAIR) and the input
//     vector is applied when it finishes. There is no second test after the
//     repair. OUT raises out_valid for one cycle while the buffer holds the
//     result.
// Fault-free MVM timing: command accepted in cycle 0, out_valid in cycle 4.
// Status: last_fault_vec (the columns flagged at the last CHECK), and
// counters of MVMs, of MVMs with a detected fault, and of flagged columns.
//
// The test-then-input order, the comparison and the repair-then-apply rule
// follow the scheme; the state encoding, the handshake and the counters are
// this design's choices.
module ft_controller
  import reram_pkg::*;
#(
  parameter int unsigned COLS = COLS_DEF
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // command
  input  logic                  cmd_valid,
  input  cmd_e                  cmd_op,
  output logic                  cmd_ready,
  // datapath control
  output logic                  in_load,
  output vsel_e                 vsel,
  output logic                  buf_capture,
  output logic                  cal_we,
  // error detector
  input  logic [COLS-1:0]       fault_vec,
  input  logic                  any_fault,
  // reprogram unit
  output logic                  rp_start,
  output logic [COLS-1:0]       rp_mask,
  input  logic                  rp_done,
  // results and status
  output logic                  out_valid,
  output logic                  prog_done,
  output ctrl_state_e           state,
  output logic [COLS-1:0]       last_fault_vec,
  output logic [31:0]           n_mvm,
  output logic [31:0]           n_mvm_faulty,
  output logic [31:0]           n_cols_flagged
);

  ctrl_state_e next;

  always_comb begin
    next = state;
    unique case (state)
      ST_IDLE: begin
        if (cmd_valid && cmd_op == CMD_PROGRAM) next = ST_PROG;
        else if (cmd_valid && cmd_op == CMD_MVM) next = ST_TEST;
      end
      ST_PROG:      if (rp_done) next = ST_CAL_APPLY;
      ST_CAL_APPLY: next = ST_CAL_STORE;
      ST_CAL_STORE: next = ST_IDLE;
      ST_TEST:      next = ST_CHECK;
      ST_CHECK:     next = any_fault ? ST_REPAIR : ST_APPLY;
      ST_REPAIR:    if (rp_done) next = ST_APPLY;
      ST_APPLY:     next = ST_OUT;
      ST_OUT:       next = ST_IDLE;
      default:      next = ST_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= ST_IDLE;
    else        state <= next;
  end

  assign cmd_ready   = (state == ST_IDLE);
  assign in_load     = (state == ST_IDLE) && cmd_valid && (cmd_op == CMD_MVM);
  assign buf_capture = (state == ST_CAL_APPLY) || (state == ST_TEST) || (state == ST_APPLY);
  assign cal_we      = (state == ST_CAL_STORE);
  assign out_valid   = (state == ST_OUT);

  always_comb begin
    unique case (state)
      ST_CAL_APPLY, ST_TEST: vsel = VSEL_TEST;
      ST_APPLY:              vsel = VSEL_INPUT;
      default:               vsel = VSEL_OFF;
    endcase
  end

  // Start the reprogram unit: every column for PROGRAM, the flagged ones after CHECK.
  always_comb begin
    rp_start = 1'b0;
    rp_mask  = '0;
    if (state == ST_IDLE && cmd_valid && cmd_op == CMD_PROGRAM) begin
      rp_start = 1'b1;
      rp_mask  = '1;
    end else if (state == ST_CHECK && any_fault) begin
      rp_start = 1'b1;
      rp_mask  = fault_vec;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prog_done      <= 1'b0;
      last_fault_vec <= '0;
      n_mvm          <= '0;
      n_mvm_faulty   <= '0;
      n_cols_flagged <= '0;
    end else begin
      prog_done <= (state == ST_CAL_STORE);
      if (state == ST_CHECK) begin
        last_fault_vec <= fault_vec;
        n_cols_flagged <= n_cols_flagged + 32'($countones(fault_vec));
        if (any_fault) n_mvm_faulty <= n_mvm_faulty + 32'd1;
      end
      if (state == ST_OUT) n_mvm <= n_mvm + 32'd1;
    end
  end

  // A command is only consumed in IDLE; the reprogram unit only reports done
  // while it was started by this controller.
  a_done_expected: assert property (@(posedge clk) disable iff (!rst_n)
                                    rp_done |-> (state == ST_PROG || state == ST_REPAIR));

endmodule
