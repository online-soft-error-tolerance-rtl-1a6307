// tb_redundancy_store: checks the reference-LSB store at 128 columns. A
// calibration write keeps the 4 LSBs of every column's 8-bit code; a
// single-column write replaces one entry; both at once lets the calibration
// win; with neither the contents hold.
module tb_redundancy_store;
  localparam int COLS = 128;
  logic clk = 0, cal_we = 0, wr_en = 0;
  logic [COLS-1:0][7:0] cal_codes;
  logic [6:0] wr_col;
  logic [3:0] wr_lsbs;
  logic [COLS-1:0][3:0] ref_lsbs, model;
  int checks = 0, failures = 0;

  redundancy_store #(.COLS(COLS), .ADC_BITS(8), .RED_BITS(4)) dut (
    .clk, .cal_we, .cal_codes, .wr_en, .wr_col, .wr_lsbs, .ref_lsbs
  );

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_col = '0; wr_lsbs = '0; cal_codes = '0;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      for (int c = 0; c < COLS; c++) cal_codes[c] = 8'($urandom);
      cal_we  = (t == 0) || ($urandom_range(0, 9) == 0);
      wr_en   = ($urandom_range(0, 1) == 1);
      wr_col  = 7'($urandom);
      wr_lsbs = 4'($urandom);
      @(posedge clk);
      if (cal_we) begin
        for (int c = 0; c < COLS; c++) model[c] = 4'(cal_codes[c] % 16);
      end else if (wr_en) begin
        model[wr_col] = wr_lsbs;
      end
      #1;
      checks++;
      if (ref_lsbs !== model) begin failures++; $display("FAIL t=%0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
