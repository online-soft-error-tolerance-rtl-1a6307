// tb_ft_crossbar_top: end-to-end test of the fault-tolerant crossbar tile at
// 16 x 16 (other parameters at their defaults: 8-bit DAC codes, 16
// conductance levels, 8-bit ADC, 4 reference LSBs, 0.3 V, 4 write cycles).
//
// The testbench keeps its own model of every cell (weights, injected soft
// errors, stuck cells) and of the DAC / crossbar / ADC chain, and from it
// predicts, for each MVM, which columns the test vector must flag, what the
// tile must output after repairing them, and how many cycles it takes
// (4 when clean, 6 + 7 per repaired column with a weight source that answers
// in its second request cycle). Scenarios: programming with calibration,
// clean MVMs, random soft errors (repaired when the reference LSBs catch
// them, left in place when they do not), stuck cells (flagged on every MVM,
// never repaired), and a wrong reference loaded directly (a needless but
// harmless repair). Each of these must occur at least once.
module tb_ft_crossbar_top;
  import reram_pkg::*;

  localparam int ROWS = 16;
  localparam int COLS = 16;
  localparam int NTRIAL = 120;
  localparam int DAC_BITS = DAC_BITS_DEF, G_BITS = G_BITS_DEF, ADC_BITS = ADC_BITS_DEF;
  localparam int RED_BITS = RED_BITS_DEF, WC = WRITE_CYCLES_DEF;
  localparam int LAT = 1;
  localparam int RW = $clog2(ROWS), CW = $clog2(COLS);

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0;
  cmd_e cmd_op = CMD_NOP;
  logic cmd_ready, out_valid, prog_done;
  logic [ROWS-1:0][DAC_BITS-1:0] in_vec = '0;
  logic [COLS-1:0][ADC_BITS-1:0] out_codes;
  logic wt_req, wt_valid;
  logic [CW-1:0] wt_col;
  logic [ROWS*G_BITS-1:0] wt_data;
  logic ref_wr_en = 0;
  logic [CW-1:0] ref_wr_col = '0;
  logic [RED_BITS-1:0] ref_wr_lsbs = '0;
  logic inj_en = 0, inj_stuck = 0;
  logic [RW-1:0] inj_row = '0;
  logic [CW-1:0] inj_col = '0;
  logic [G_BITS-1:0] inj_level = '0;
  ctrl_state_e state;
  logic [COLS-1:0] last_fault_vec;
  logic [31:0] n_mvm, n_mvm_faulty, n_cols_flagged, n_cols_written;

  ft_crossbar_top #(.ROWS(ROWS), .COLS(COLS)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_op, .cmd_ready, .in_vec,
    .out_valid, .out_codes, .prog_done,
    .wt_req, .wt_col, .wt_valid, .wt_data,
    .ref_wr_en, .ref_wr_col, .ref_wr_lsbs,
    .inj_en, .inj_row, .inj_col, .inj_level, .inj_stuck,
    .state, .last_fault_vec, .n_mvm, .n_mvm_faulty, .n_cols_flagged, .n_cols_written
  );

  golden_weight_model #(.ROWS(ROWS), .COLS(COLS), .G_BITS(G_BITS), .LAT(LAT)) u_wm (
    .clk, .rst_n, .wt_req, .wt_col, .wt_valid, .wt_data
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_prog = 0, n_clean = 0, n_repair = 0, n_undetected = 0, n_stuck_seen = 0, n_ref_load = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  int unsigned gold  [COLS][ROWS];   // known weights
  int unsigned lvl   [COLS][ROWS];   // present cell levels
  bit          stuck [COLS][ROWS];
  int unsigned refl  [COLS];         // reference LSBs the tile should hold

  function automatic longint unsigned volt(int unsigned code);
    return (longint'(code) * 300000) / ((1 << DAC_BITS) - 1);
  endfunction

  function automatic int unsigned adc(longint unsigned i);
    longint unsigned fs, q;
    fs = longint'(ROWS) * 300000 * ((1 << G_BITS) - 1);
    q  = (i << ADC_BITS) / (fs + 1);
    return (q > 255) ? 255 : int'(q);
  endfunction

  function automatic int unsigned col_code(int c, logic [ROWS-1:0][DAC_BITS-1:0] v, bit test);
    longint unsigned acc = 0;
    for (int r = 0; r < ROWS; r++)
      acc += volt(test ? ((1 << DAC_BITS) - 1) : int'(v[r])) * longint'(lvl[c][r]);
    return adc(acc);
  endfunction

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic inject(int r, int c, int lv, bit st);
    @(negedge clk);
    inj_en = 1; inj_row = RW'(r); inj_col = CW'(c); inj_level = G_BITS'(lv); inj_stuck = st;
    lvl[c][r] = lv;
    if (st) stuck[c][r] = 1;
    @(negedge clk);
    inj_en = 0; inj_stuck = 0;
  endtask

  // Run one MVM and check detection, repair, result and latency.
  task automatic mvm();
    logic [COLS-1:0] exp_fv;
    logic [ROWS-1:0][DAC_BITS-1:0] v;
    int k, cyc, exp_cyc;
    bit undetected;
    for (int r = 0; r < ROWS; r++) v[r] = DAC_BITS'($urandom);
    exp_fv = '0;
    undetected = 0;
    for (int c = 0; c < COLS; c++) begin
      bit differs = 0;
      for (int r = 0; r < ROWS; r++) if (lvl[c][r] != gold[c][r]) differs = 1;
      exp_fv[c] = ((col_code(c, v, 1) % (1 << RED_BITS)) != refl[c]);
      if (differs && !exp_fv[c]) undetected = 1;
    end
    k = $countones(exp_fv);
    // repair: flagged columns are rewritten, stuck cells keep their level
    for (int c = 0; c < COLS; c++)
      if (exp_fv[c])
        for (int r = 0; r < ROWS; r++) if (!stuck[c][r]) lvl[c][r] = gold[c][r];
    @(negedge clk);
    cmd_valid = 1; cmd_op = CMD_MVM; in_vec = v;
    #1;
    chk(cmd_ready, "ready");
    @(negedge clk);
    cmd_valid = 0; cmd_op = CMD_NOP; in_vec = '0;
    cyc = 1;
    while (!out_valid && cyc < 100000) begin @(negedge clk); cyc++; end
    exp_cyc = (k == 0) ? 4 : 6 + k * (1 + (LAT + 1) + WC);
    chk(cyc == exp_cyc, $sformatf("latency %0d expected %0d", cyc, exp_cyc));
    chk(last_fault_vec == exp_fv, $sformatf("fault vector %h expected %h", last_fault_vec, exp_fv));
    for (int c = 0; c < COLS; c++)
      chk(int'(out_codes[c]) == col_code(c, v, 0), $sformatf("result col %0d", c));
    if (k == 0) n_clean++; else n_repair++;
    if (undetected) n_undetected++;
  endtask

  function automatic bit any_stuck_flagged();
    for (int c = 0; c < COLS; c++)
      if (last_fault_vec[c])
        for (int r = 0; r < ROWS; r++) if (stuck[c][r] && lvl[c][r] != gold[c][r]) return 1;
    return 0;
  endfunction

  initial begin
    int cyc;
    for (int c = 0; c < COLS; c++) begin
      logic [ROWS*G_BITS-1:0] w;
      for (int r = 0; r < ROWS; r++) begin
        gold[c][r] = $urandom_range(0, (1 << G_BITS) - 1);
        lvl[c][r] = gold[c][r];
        stuck[c][r] = 0;
        w[r*G_BITS +: G_BITS] = G_BITS'(gold[c][r]);
      end
      u_wm.w[c] = w;
    end
    for (int c = 0; c < COLS; c++) begin
      logic [ROWS-1:0][DAC_BITS-1:0] dummy = '0;
      refl[c] = col_code(c, dummy, 1) % (1 << RED_BITS);
    end
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;

    // programming and calibration
    cmd_valid = 1; cmd_op = CMD_PROGRAM;
    @(negedge clk);
    cmd_valid = 0; cmd_op = CMD_NOP;
    cyc = 1;
    while (!prog_done && cyc < 1000000) begin @(negedge clk); cyc++; end
    chk(cyc == COLS * (1 + (LAT + 1) + WC) + 5, $sformatf("program latency %0d", cyc));
    chk(int'(n_cols_written) == COLS, "all columns written");
    for (int c = 0; c < COLS; c++)
      chk(int'(dut.u_ref.ref_lsbs[c]) == refl[c], $sformatf("reference col %0d", c));
    n_prog++;

    // clean multiplications
    for (int t = 0; t < 4; t++) mvm();
    chk(n_mvm_faulty == 0, "no fault on a clean array");

    // soft errors
    for (int t = 0; t < NTRIAL; t++) begin
      int nf;
      nf = $urandom_range(0, 3);
      for (int f = 0; f < nf; f++)
        inject($urandom_range(0, ROWS - 1), $urandom_range(0, COLS - 1),
               $urandom_range(0, (1 << G_BITS) - 1), 0);
      mvm();
    end

    // restore every column so the stuck-lvl scenario starts clean
    for (int c = 0; c < COLS; c++) begin
      refl[c] = (refl[c] + 1) % (1 << RED_BITS);
    end
    for (int c = 0; c < COLS; c++) begin
      @(negedge clk);
      ref_wr_en = 1; ref_wr_col = CW'(c); ref_wr_lsbs = RED_BITS'(refl[c]);
    end
    @(negedge clk);
    ref_wr_en = 0;
    n_ref_load++;
    mvm();   // every column flagged by a wrong reference: all rewritten
    chk(last_fault_vec == '1, "wrong references flag every column");
    for (int c = 0; c < COLS; c++) begin
      logic [ROWS-1:0][DAC_BITS-1:0] dummy = '0;
      refl[c] = col_code(c, dummy, 1) % (1 << RED_BITS);
      @(negedge clk);
      ref_wr_en = 1; ref_wr_col = CW'(c); ref_wr_lsbs = RED_BITS'(refl[c]);
    end
    @(negedge clk);
    ref_wr_en = 0;
    mvm();
    chk(last_fault_vec == '0, "correct references again");

    // stuck lvl that changes the test code LSBs: flagged on every MVM
    begin
      int sc, sr, lv;
      sc = $urandom_range(0, COLS - 1);
      sr = $urandom_range(0, ROWS - 1);
      lv = -1;
      for (int cand = 0; cand < (1 << G_BITS) && lv < 0; cand++) begin
        logic [ROWS-1:0][DAC_BITS-1:0] dummy = '0;
        int unsigned keep;
        keep = lvl[sc][sr];
        lvl[sc][sr] = cand;
        if (col_code(sc, dummy, 1) % (1 << RED_BITS) != refl[sc]) lv = cand;
        lvl[sc][sr] = keep;
      end
      if (lv >= 0) begin
        inject(sr, sc, lv, 1);
        for (int t = 0; t < 3; t++) begin
          mvm();
          chk(last_fault_vec[sc], "stuck column flagged");
          if (any_stuck_flagged()) n_stuck_seen++;
        end
      end
    end

    @(negedge clk);
    chk(int'(n_mvm) == n_clean + n_repair, $sformatf("MVM counter %0d", n_mvm));
    $display("mechanisms: program+calibrate=%0d clean=%0d repaired=%0d undetected_soft=%0d stuck_flagged=%0d ref_load=%0d",
             n_prog, n_clean, n_repair, n_undetected, n_stuck_seen, n_ref_load);
    chk(n_prog > 0, "programming happened");
    chk(n_clean > 0, "clean MVM happened");
    chk(n_repair > 0, "repair happened");
    chk(n_stuck_seen > 0, "stuck lvl flagged");
    chk(n_ref_load > 0, "direct reference load happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
