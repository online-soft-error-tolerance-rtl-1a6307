// tb_bl_adc: checks the bitline ADC quantiser. The full-scale current is that
// of a 16-row column at 0.3 V with 16 conductance levels. For random and edge
// currents the code is compared with a reference found by search: the largest
// k for which k * (I_FS + 1) <= i * 256, limited to 255.
module tb_bl_adc;
  import reram_pkg::*;

  localparam longint unsigned I_FS = 64'd16 * 64'd300000 * 64'd15;
  logic [I_W-1:0] i_bl;
  logic [7:0]     code;
  int checks = 0, failures = 0;

  bl_adc #(.ADC_BITS(8), .I_FS(I_FS)) dut (.i_bl, .code);

  function automatic int ref_code(longint unsigned i);
    int k = 0;
    while (k < 255 && longint'(k + 1) * longint'(I_FS + 1) <= i * 256) k++;
    return k;
  endfunction

  task automatic check(longint unsigned i);
    i_bl = I_W'(i);
    #1;
    checks++;
    if (int'(code) != ref_code(i)) begin
      failures++;
      $display("FAIL i=%0d code=%0d exp=%0d", i, code, ref_code(i));
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(0);
    check(I_FS);
    check(I_FS * 2);          // saturates
    check((I_FS + 1) / 256);  // near first step
    check((I_FS + 1) / 256 + 1);
    for (int n = 0; n < 300; n++) check(longint'($urandom_range(0, 32'(I_FS))));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
