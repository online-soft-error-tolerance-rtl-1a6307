// tb_vector_select: checks that the held input vector is loaded only with
// in_load, that VSEL_TEST drives the maximum code on every row, VSEL_INPUT the
// held vector, and VSEL_OFF zeros, in the same cycle as the selection.
module tb_vector_select;
  import reram_pkg::*;
  localparam int ROWS = 16;
  logic clk = 0, rst_n = 0, in_load = 0;
  logic [ROWS-1:0][7:0] in_vec, dac_code, held_ref;
  vsel_e sel = VSEL_OFF;
  int checks = 0, failures = 0;

  vector_select #(.ROWS(ROWS), .DAC_BITS(8)) dut (.clk, .rst_n, .in_load, .in_vec, .sel, .dac_code);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_code(logic [ROWS-1:0][7:0] e, string what);
    #1;
    checks++;
    if (dac_code !== e) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    in_vec = '0;
    held_ref = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      @(negedge clk);
      for (int r = 0; r < ROWS; r++) in_vec[r] = 8'($urandom);
      in_load = ($urandom_range(0, 1) == 1);
      @(posedge clk);
      if (in_load) held_ref = in_vec;
      @(negedge clk);
      in_load = 0;
      in_vec  = '0;
      sel = VSEL_TEST;  expect_code({ROWS{8'hff}}, "test");
      sel = VSEL_INPUT; expect_code(held_ref, "input");
      sel = VSEL_OFF;   expect_code('0, "off");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
