// tb_lsb_comparator: exhaustive check of the one-column 4-bit LSB comparator
// with an 8-bit ADC code: all 256 codes against all 16 reference values.
// A column is faulty exactly when code mod 16 differs from the reference.
module tb_lsb_comparator;
  logic [7:0] code;
  logic [3:0] ref_lsbs;
  logic       equal, fault;
  int checks = 0, failures = 0;

  lsb_comparator #(.ADC_BITS(8), .RED_BITS(4)) dut (.code, .ref_lsbs, .equal, .fault);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 256; c++) begin
      for (int r = 0; r < 16; r++) begin
        bit exp_eq;
        code = 8'(c); ref_lsbs = 4'(r);
        #1;
        exp_eq = ((c % 16) == r);
        checks++;
        if (equal !== exp_eq || fault !== !exp_eq) begin
          failures++;
          $display("FAIL code=%0d ref=%0d eq=%0b fault=%0b", c, r, equal, fault);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
