// tb_reprogram_unit: checks the column rewrite sequencer at 8 rows x 16
// columns with WRITE_CYCLES = 3 and a weight source (LAT = 2) whose answer is
// seen in the third request cycle. For random masks it checks that exactly the masked columns are
// written, lowest index first, each with its own weights, each for exactly
// WRITE_CYCLES cycles, that done follows the last write, that the total job
// length matches (1 selection + 3 request + 3 write cycles per column, plus
// 1 cycle for the final empty check), and that cols_written counts them.
module tb_reprogram_unit;
  localparam int ROWS = 8, COLS = 16, GB = 4, WC = 3, LAT = 2;

  logic clk = 0, rst_n = 0, start = 0;
  logic [COLS-1:0] mask = '0;
  logic busy, done, wt_req, wt_valid, xb_wr_en;
  logic [3:0] wt_col, xb_wr_col;
  logic [ROWS*GB-1:0] wt_data, xb_wr_data;
  logic [31:0] cols_written;
  int checks = 0, failures = 0;

  reprogram_unit #(.ROWS(ROWS), .COLS(COLS), .G_BITS(GB), .WRITE_CYCLES(WC)) dut (
    .clk, .rst_n, .start, .mask, .busy, .done,
    .wt_req, .wt_col, .wt_valid, .wt_data,
    .xb_wr_en, .xb_wr_col, .xb_wr_data, .cols_written
  );

  golden_weight_model #(.ROWS(ROWS), .COLS(COLS), .G_BITS(GB), .LAT(LAT)) u_wm (
    .clk, .rst_n, .wt_req, .wt_col, .wt_valid, .wt_data
  );

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // record writes
  int wr_cycles [COLS];
  int order [$];
  always @(posedge clk) begin
    if (rst_n && xb_wr_en) begin
      if (wr_cycles[xb_wr_col] == 0) order.push_back(int'(xb_wr_col));
      wr_cycles[xb_wr_col]++;
      if (xb_wr_data !== u_wm.w[xb_wr_col]) begin
        failures++;
        $display("FAIL data col=%0d", xb_wr_col);
      end
    end
  end

  initial begin
    int total_written = 0;
    for (int c = 0; c < COLS; c++) u_wm.w[c] = {$urandom, $urandom};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int n, cyc, exp_cyc, prev;
      logic [COLS-1:0] m;
      m = (t == 0) ? '0 : (t == 1) ? '1 : COLS'($urandom & $urandom);
      foreach (wr_cycles[c]) wr_cycles[c] = 0;
      order.delete();
      @(negedge clk);
      start = 1; mask = m;
      @(negedge clk);
      start = 0; mask = '0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      n = $countones(m);
      total_written += n;
      exp_cyc = 1 + n * (1 + (LAT + 1) + WC) + 1;
      checks++;
      if (cyc != exp_cyc) begin failures++; $display("FAIL cycles t=%0d %0d exp %0d", t, cyc, exp_cyc); end
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (wr_cycles[c] != (m[c] ? WC : 0)) begin
          failures++;
          $display("FAIL col %0d written %0d cycles", c, wr_cycles[c]);
        end
      end
      prev = -1;
      foreach (order[k]) begin
        checks++;
        if (order[k] <= prev) begin failures++; $display("FAIL order"); end
        prev = order[k];
      end
      @(negedge clk);
      checks++;
      if (busy || done) begin failures++; $display("FAIL not idle"); end
      checks++;
      if (int'(cols_written) != total_written) begin failures++; $display("FAIL count"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
