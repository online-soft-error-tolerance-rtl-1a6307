// tb_ft_controller: checks the sequencer against a scripted environment at 16
// columns. The error detector is replaced by a fault vector the testbench
// chooses per MVM; the reprogram unit by a done pulse a random number of
// cycles after its start. Checked for every command: the handshake, the state
// order, the wordline selection and capture strobes in each state, the mask
// handed to the reprogram unit, the calibration write, out_valid exactly 4
// cycles after a fault-free MVM is accepted (and 4 + repair time otherwise),
// and the counters.
module tb_ft_controller;
  import reram_pkg::*;
  localparam int COLS = 16;

  logic clk = 0, rst_n = 0, cmd_valid = 0;
  cmd_e cmd_op = CMD_NOP;
  logic cmd_ready, in_load, buf_capture, cal_we, rp_start, rp_done = 0;
  logic out_valid, prog_done;
  vsel_e vsel;
  ctrl_state_e state;
  logic [COLS-1:0] fault_vec = '0, rp_mask, last_fault_vec;
  logic any_fault;
  logic [31:0] n_mvm, n_mvm_faulty, n_cols_flagged;
  int checks = 0, failures = 0;

  assign any_fault = |fault_vec;

  ft_controller #(.COLS(COLS)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_op, .cmd_ready,
    .in_load, .vsel, .buf_capture, .cal_we,
    .fault_vec, .any_fault, .rp_start, .rp_mask, .rp_done,
    .out_valid, .prog_done, .state, .last_fault_vec,
    .n_mvm, .n_mvm_faulty, .n_cols_flagged
  );

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // Issue a command in the current (negedge) cycle; returns after acceptance.
  task automatic issue(cmd_e op);
    cmd_valid = 1; cmd_op = op;
    #1;
    chk(cmd_ready, "ready in idle");
    chk(in_load == (op == CMD_MVM), "in_load with MVM");
    @(negedge clk);
    cmd_valid = 0; cmd_op = CMD_NOP;
  endtask

  // Answer a reprogram start after d cycles.
  task automatic serve_rp(int d, logic [COLS-1:0] exp_mask);
    chk(rp_start, "rp_start");
    chk(rp_mask == exp_mask, "rp_mask");
    @(negedge clk);
    repeat (d) begin
      chk(!out_valid && !buf_capture && vsel == VSEL_OFF, "quiet during repair");
      @(negedge clk);
    end
    rp_done = 1;
    @(negedge clk);
    rp_done = 0;
  endtask

  int exp_mvm = 0, exp_faulty = 0, exp_flagged = 0;

  task automatic do_mvm(logic [COLS-1:0] fv);
    int d;
    issue(CMD_MVM);
    chk(state == ST_TEST && vsel == VSEL_TEST && buf_capture, "TEST cycle");
    chk(!cmd_ready, "busy");
    @(negedge clk);
    fault_vec = fv;
    #1;
    chk(state == ST_CHECK && !buf_capture, "CHECK cycle");
    exp_mvm++;
    exp_flagged += $countones(fv);
    if (fv != '0) begin
      exp_faulty++;
      d = $urandom_range(0, 6);
      serve_rp(d, fv);
      fault_vec = '0;
    end else begin
      chk(!rp_start, "no repair when clean");
      @(negedge clk);
      fault_vec = '0;
    end
    chk(state == ST_APPLY && vsel == VSEL_INPUT && buf_capture, "APPLY cycle");
    chk(last_fault_vec == fv, "last_fault_vec");
    @(negedge clk);
    chk(out_valid && state == ST_OUT, "out_valid");
    @(negedge clk);
    chk(!out_valid && cmd_ready, "back to idle");
    chk(int'(n_mvm) == exp_mvm && int'(n_mvm_faulty) == exp_faulty &&
        int'(n_cols_flagged) == exp_flagged, "counters");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    #1;
    chk(state == ST_IDLE && cmd_ready, "reset state");
    // a NOP is ignored
    cmd_valid = 1; cmd_op = CMD_NOP;
    @(negedge clk);
    cmd_valid = 0;
    chk(state == ST_IDLE, "nop ignored");
    // PROGRAM
    issue(CMD_PROGRAM);
    chk(state == ST_PROG, "PROG");
    @(negedge clk);
    @(negedge clk);
    rp_done = 1;
    @(negedge clk);
    rp_done = 0;
    chk(state == ST_CAL_APPLY && vsel == VSEL_TEST && buf_capture && !cal_we, "CAL_APPLY");
    @(negedge clk);
    chk(state == ST_CAL_STORE && cal_we && !buf_capture, "CAL_STORE");
    @(negedge clk);
    chk(prog_done && cmd_ready, "prog_done");
    // cycle count of a clean MVM: accept at 0, out_valid at 4
    begin
      int cyc = 0;
      cmd_valid = 1; cmd_op = CMD_MVM;
      @(negedge clk);
      cmd_valid = 0;
      cyc = 1;
      while (!out_valid) begin @(negedge clk); cyc++; end
      chk(cyc == 4, "clean MVM latency 4");
      exp_mvm++;
      @(negedge clk);
    end
    for (int t = 0; t < 60; t++) begin
      logic [COLS-1:0] fv;
      fv = ($urandom_range(0, 1) == 1) ? COLS'($urandom & $urandom & $urandom) : '0;
      do_mvm(fv);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
