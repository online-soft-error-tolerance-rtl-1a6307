// tb_workload_fault_sweep: a fault-rate sweep on a layer-sized workload, in
// the manner of the published fault-detection experiments.
//
// Four tiles at the default size (128 x 128, 8-bit ADC, 0.3 V) differ only
// in the number of reference LSBs, 1 to 4. Each holds the same 120 x 84
// weight matrix, the size of LeNet-5's second fully connected layer. The
// weights are skewed towards low conductance levels, so that column codes are
// mostly small, and unused rows and columns are 0. For each fault rate (1, 2,
// 5, 10, 15, 20, 30, 40, 50 and 60 % of the mapped cells) every tile is
// programmed afresh. The same soft errors are then injected into all four:
// each chosen cell moves to a different random level. One MVM follows.
// Checks: each tile flags exactly the columns whose test-vector LSBs differ
// (from the testbench's own model), columns flagged with k LSBs are also
// flagged with k+1, and every tile's output equals the model's output after
// its own repair. The detection rate per LSB count (flagged faulty columns /
// faulty columns) is printed for each fault rate.
module tb_workload_fault_sweep;
  import reram_pkg::*;

  localparam int ROWS = ROWS_DEF, COLS = COLS_DEF;
  localparam int MR = 120, MC = 84;         // mapped layer
  localparam int NT = 4;                    // tiles: RED_BITS = 1..4
  localparam int DB = DAC_BITS_DEF, GB = G_BITS_DEF, AB = ADC_BITS_DEF;
  localparam int RW = $clog2(ROWS), CW = $clog2(COLS);
  localparam int NRATE = 10;
  localparam int RATES [NRATE] = '{1, 2, 5, 10, 15, 20, 30, 40, 50, 60};

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0;
  cmd_e cmd_op = CMD_NOP;
  logic [ROWS-1:0][DB-1:0] in_vec = '0;
  logic inj_en = 0;
  logic [RW-1:0] inj_row = '0;
  logic [CW-1:0] inj_col = '0;
  logic [GB-1:0] inj_level = '0;

  logic                 cmd_ready [NT];
  logic                 out_valid [NT];
  logic                 prog_done [NT];
  logic [COLS-1:0][AB-1:0] out_codes [NT];
  logic [COLS-1:0]      last_fault_vec [NT];
  logic                 wt_req [NT], wt_valid [NT];
  logic [CW-1:0]        wt_col [NT];
  logic [ROWS*GB-1:0]   wt_data [NT];

  for (genvar t = 0; t < NT; t++) begin : g_tile
    ctrl_state_e st;
    logic [31:0] c0, c1, c2, c3;
    ft_crossbar_top #(.RED_BITS(t + 1)) dut (
      .clk, .rst_n, .cmd_valid, .cmd_op, .cmd_ready(cmd_ready[t]), .in_vec,
      .out_valid(out_valid[t]), .out_codes(out_codes[t]), .prog_done(prog_done[t]),
      .wt_req(wt_req[t]), .wt_col(wt_col[t]), .wt_valid(wt_valid[t]), .wt_data(wt_data[t]),
      .ref_wr_en(1'b0), .ref_wr_col('0), .ref_wr_lsbs('0),
      .inj_en, .inj_row, .inj_col, .inj_level, .inj_stuck(1'b0),
      .state(st), .last_fault_vec(last_fault_vec[t]),
      .n_mvm(c0), .n_mvm_faulty(c1), .n_cols_flagged(c2), .n_cols_written(c3)
    );
    golden_weight_model #(.ROWS(ROWS), .COLS(COLS), .G_BITS(GB), .LAT(1)) u_wm (
      .clk, .rst_n, .wt_req(wt_req[t]), .wt_col(wt_col[t]),
      .wt_valid(wt_valid[t]), .wt_data(wt_data[t])
    );
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  int unsigned gold [COLS][ROWS];
  int unsigned lvl  [COLS][ROWS];

  function automatic longint unsigned volt(int unsigned code);
    return (longint'(code) * 300000) / ((1 << DB) - 1);
  endfunction

  function automatic int unsigned adc(longint unsigned i);
    longint unsigned q;
    q = (i << AB) / (longint'(ROWS) * 300000 * ((1 << GB) - 1) + 1);
    return (q > 255) ? 255 : int'(q);
  endfunction

  function automatic int unsigned code_of(int unsigned cells [ROWS], logic [ROWS-1:0][DB-1:0] v, bit test);
    longint unsigned acc = 0;
    for (int r = 0; r < ROWS; r++) acc += volt(test ? ((1 << DB) - 1) : int'(v[r])) * longint'(cells[r]);
    return adc(acc);
  endfunction

  // Latch each tile's result when its out_valid pulses.
  logic [COLS-1:0][AB-1:0] got [NT];
  bit                      got_valid [NT];
  always @(posedge clk) begin
    for (int t = 0; t < NT; t++) if (out_valid[t]) begin got[t] <= out_codes[t]; got_valid[t] <= 1; end
  end

  initial begin : main
    for (int c = 0; c < COLS; c++) begin
      for (int r = 0; r < ROWS; r++) begin
        gold[c][r] = (r < MR && c < MC) ? ($urandom_range(0, 15) * $urandom_range(0, 15)) / 15 : 0;
      end
    end
    for (int t = 0; t < NT; t++) begin
      for (int c = 0; c < COLS; c++) begin
        logic [ROWS*GB-1:0] w;
        for (int r = 0; r < ROWS; r++) w[r*GB +: GB] = GB'(gold[c][r]);
        case (t)
          0: g_tile[0].u_wm.w[c] = w;
          1: g_tile[1].u_wm.w[c] = w;
          2: g_tile[2].u_wm.w[c] = w;
          default: g_tile[3].u_wm.w[c] = w;
        endcase
      end
    end
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;

    for (int k = 0; k < NRATE; k++) begin
      int nfault, faulty_cols;
      int detected [NT];
      int unsigned ref_code [COLS];
      int unsigned test_code [COLS];
      logic [COLS-1:0] exp_fv [NT];
      logic [ROWS-1:0][DB-1:0] v;
      bit fresh [ROWS*COLS];

      // fresh programming of all tiles
      @(negedge clk);
      cmd_valid = 1; cmd_op = CMD_PROGRAM;
      @(negedge clk);
      cmd_valid = 0; cmd_op = CMD_NOP;
      while (!prog_done[0]) @(negedge clk);
      for (int c = 0; c < COLS; c++) for (int r = 0; r < ROWS; r++) lvl[c][r] = gold[c][r];
      for (int c = 0; c < COLS; c++) ref_code[c] = code_of(lvl[c], v, 1);

      // soft errors in RATES[k] % of the mapped cells
      nfault = (MR * MC * RATES[k]) / 100;
      for (int n = 0; n < ROWS * COLS; n++) fresh[n] = 1;
      for (int n = 0; n < nfault; n++) begin
        int r, c, lv;
        do begin
          r = $urandom_range(0, MR - 1);
          c = $urandom_range(0, MC - 1);
        end while (!fresh[r * COLS + c]);
        fresh[r * COLS + c] = 0;
        do lv = $urandom_range(0, 15); while (lv == int'(lvl[c][r]));
        lvl[c][r] = lv;
        @(negedge clk);
        inj_en = 1; inj_row = RW'(r); inj_col = CW'(c); inj_level = GB'(lv);
      end
      @(negedge clk);
      inj_en = 0;

      // expected detection per tile
      faulty_cols = 0;
      for (int c = 0; c < COLS; c++) begin
        bit differs;
        differs = 0;
        for (int r = 0; r < ROWS; r++) if (lvl[c][r] != gold[c][r]) differs = 1;
        if (differs) faulty_cols++;
        test_code[c] = code_of(lvl[c], v, 1);
        for (int t = 0; t < NT; t++) begin
          int m;
          m = 1 << (t + 1);
          exp_fv[t][c] = ((test_code[c] % m) != (ref_code[c] % m));
        end
      end

      // one MVM on all tiles
      for (int r = 0; r < ROWS; r++) v[r] = (r < MR) ? DB'($urandom) : '0;
      for (int t = 0; t < NT; t++) got_valid[t] = 0;
      @(negedge clk);
      cmd_valid = 1; cmd_op = CMD_MVM; in_vec = v;
      @(negedge clk);
      cmd_valid = 0; cmd_op = CMD_NOP;
      while (!(got_valid[0] && got_valid[1] && got_valid[2] && got_valid[3])) @(negedge clk);

      for (int t = 0; t < NT; t++) begin
        chk(last_fault_vec[t] == exp_fv[t], $sformatf("rate %0d%% tile %0d fault vector", RATES[k], t + 1));
        if (t > 0) chk((exp_fv[t - 1] & ~last_fault_vec[t]) == '0, "detection nested in LSB count");
        detected[t] = $countones(last_fault_vec[t]);
        for (int c = 0; c < COLS; c++) begin
          int unsigned after [ROWS];
          for (int r = 0; r < ROWS; r++) after[r] = exp_fv[t][c] ? gold[c][r] : lvl[c][r];
          chk(int'(got[t][c]) == code_of(after, v, 0), $sformatf("rate %0d%% tile %0d col %0d result", RATES[k], t + 1, c));
        end
      end
      $display("fault rate %0d%%: %0d faulty cells in %0d columns; flagged columns with 1/2/3/4 LSBs: %0d %0d %0d %0d",
               RATES[k], nfault, faulty_cols, detected[0], detected[1], detected[2], detected[3]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
