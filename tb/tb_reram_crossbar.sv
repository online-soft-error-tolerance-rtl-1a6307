// tb_reram_crossbar: checks the crossbar model at 8 rows x 6 columns.
// Random columns are programmed and random wordline voltages applied; every
// bitline current is compared with a reference sum of V*G kept in the
// testbench. A soft fault changes one cell and is undone by rewriting its
// column; a stuck fault survives rewriting; reset releases stuck cells.
module tb_reram_crossbar;
  import reram_pkg::*;
  localparam int ROWS = 8, COLS = 6, GB = 4;

  logic clk = 0, rst_n = 0;
  logic wr_en = 0, inj_en = 0, inj_stuck = 0;
  logic [2:0] wr_col = '0, inj_col = '0;
  logic [2:0] inj_row = '0;
  logic [ROWS*GB-1:0] wr_data = '0;
  logic [GB-1:0] inj_level = '0;
  logic [ROWS-1:0][V_W-1:0] v_wl;
  logic [COLS-1:0][I_W-1:0] i_bl;

  int unsigned gref [ROWS][COLS];
  bit          sref [ROWS][COLS];
  int checks = 0, failures = 0;

  reram_crossbar #(.ROWS(ROWS), .COLS(COLS), .G_BITS(GB)) dut (
    .clk, .rst_n, .wr_en, .wr_col, .wr_data,
    .inj_en, .inj_row, .inj_col, .inj_level, .inj_stuck, .v_wl, .i_bl
  );

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_col(int c);
    @(negedge clk);
    wr_en = 1; wr_col = 3'(c);
    for (int r = 0; r < ROWS; r++) begin
      int unsigned lv = $urandom_range(0, 15);
      wr_data[r*GB +: GB] = GB'(lv);
      if (!sref[r][c]) gref[r][c] = lv;
    end
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic inject(int r, int c, int lv, bit stuck);
    @(negedge clk);
    inj_en = 1; inj_row = 3'(r); inj_col = 3'(c); inj_level = GB'(lv); inj_stuck = stuck;
    gref[r][c] = lv;
    if (stuck) sref[r][c] = 1;
    @(negedge clk);
    inj_en = 0; inj_stuck = 0;
  endtask

  task automatic check_mvm();
    for (int r = 0; r < ROWS; r++) v_wl[r] = V_W'($urandom_range(0, 300000));
    #1;
    for (int c = 0; c < COLS; c++) begin
      longint unsigned e = 0;
      for (int r = 0; r < ROWS; r++) e += longint'(v_wl[r]) * longint'(gref[r][c]);
      checks++;
      if (longint'(i_bl[c]) != e) begin
        failures++;
        $display("FAIL col=%0d i=%0d exp=%0d", c, i_bl[c], e);
      end
    end
  endtask

  initial begin
    v_wl = '0;
    foreach (sref[r, c]) sref[r][c] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < COLS; c++) write_col(c);
    for (int t = 0; t < 20; t++) check_mvm();
    // soft fault, then repair by rewriting
    inject(3, 2, (gref[3][2] + 7) % 16, 0);
    check_mvm();
    write_col(2);
    check_mvm();
    checks++;
    if (sref[3][2]) failures++;
    // stuck fault survives rewriting
    inject(5, 4, 15, 1);
    write_col(4);
    check_mvm();
    checks++;
    if (gref[5][4] != 15) begin failures++; $display("FAIL stuck model"); end
    inject(0, 0, 0, 1);
    write_col(0);
    for (int t = 0; t < 10; t++) check_mvm();
    // reset releases stuck cells
    @(negedge clk); rst_n = 0; @(negedge clk); rst_n = 1;
    foreach (sref[r, c]) sref[r][c] = 0;
    write_col(4);
    write_col(0);
    for (int t = 0; t < 10; t++) check_mvm();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
