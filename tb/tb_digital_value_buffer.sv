// tb_digital_value_buffer: checks that the ADC codes are stored on a clock
// edge with capture high, held while capture is low, and cleared by reset.
module tb_digital_value_buffer;
  localparam int COLS = 32;
  logic clk = 0, rst_n = 0, capture = 0;
  logic [COLS-1:0][7:0] adc_code, codes, exp_codes;
  int checks = 0, failures = 0;

  digital_value_buffer #(.COLS(COLS), .ADC_BITS(8)) dut (.clk, .rst_n, .capture, .adc_code, .codes);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    adc_code = '1;
    #1;
    checks++;
    if (codes !== '0) begin failures++; $display("FAIL reset"); end
    exp_codes = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      for (int c = 0; c < COLS; c++) adc_code[c] = 8'($urandom);
      capture = ($urandom_range(0, 2) == 0);
      @(posedge clk);
      if (capture) exp_codes = adc_code;
      #1;
      checks++;
      if (codes !== exp_codes) begin failures++; $display("FAIL t=%0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
