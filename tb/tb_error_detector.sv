// tb_error_detector: checks the column comparator array at 128 columns.
// Reference LSBs are random; the codes are made to match them except in a
// random set of columns, whose codes get a different low nibble (their upper
// bits are random in all columns, which must not matter). The fault vector,
// its OR and the count are compared with the injected set.
module tb_error_detector;
  localparam int COLS = 128;
  logic [COLS-1:0][7:0] codes;
  logic [COLS-1:0][3:0] ref_lsbs;
  logic [COLS-1:0]      fault_vec;
  logic                 any_fault;
  logic [7:0]           n_faulty;
  int checks = 0, failures = 0;

  error_detector #(.COLS(COLS), .ADC_BITS(8), .RED_BITS(4)) dut (
    .codes, .ref_lsbs, .fault_vec, .any_fault, .n_faulty
  );

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      logic [COLS-1:0] exp_vec;
      int nexp;
      int nbad;
      nbad = (t == 0) ? 0 : (t == 1) ? COLS : $urandom_range(0, 6);
      exp_vec = '0;
      for (int k = 0; k < nbad; k++) exp_vec[(t == 1) ? k : $urandom_range(0, COLS - 1)] = 1'b1;
      nexp = 0;
      for (int c = 0; c < COLS; c++) begin
        ref_lsbs[c] = 4'($urandom);
        codes[c][7:4] = 4'($urandom);
        codes[c][3:0] = exp_vec[c] ? ref_lsbs[c] ^ 4'($urandom_range(1, 15)) : ref_lsbs[c];
        if (exp_vec[c]) nexp++;
      end
      #1;
      checks++;
      if (fault_vec !== exp_vec) begin failures++; $display("FAIL vec t=%0d", t); end
      checks++;
      if (any_fault !== (nexp != 0)) begin failures++; $display("FAIL any t=%0d", t); end
      checks++;
      if (int'(n_faulty) != nexp) begin failures++; $display("FAIL count t=%0d %0d/%0d", t, n_faulty, nexp); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
