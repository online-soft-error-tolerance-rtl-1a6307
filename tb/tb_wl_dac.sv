// tb_wl_dac: checks the wordline DAC transfer. Every code of an 8-bit DAC
// with 0.3 V full scale is compared with a reference computed in real
// arithmetic (floor of code/255 * 300000 microvolts); zero and full scale are
// checked to be exactly 0 V and 0.3 V.
module tb_wl_dac;
  import reram_pkg::*;

  logic [7:0]     code;
  logic [V_W-1:0] v_uv;
  int checks = 0, failures = 0;

  wl_dac #(.DAC_BITS(8), .VMAX_UV(300_000)) dut (.code, .v_uv);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 256; k++) begin
      real    vr;
      int     expv;
      code = 8'(k);
      #1;
      vr   = (real'(k) / 255.0) * 300000.0;
      expv = int'($floor(vr + 1e-6));
      checks++;
      if (int'(v_uv) != expv) begin
        failures++;
        $display("FAIL code=%0d v=%0d exp=%0d", k, v_uv, expv);
      end
    end
    code = 8'hff; #1; checks++; if (v_uv != V_W'(300000)) failures++;
    code = 8'h00; #1; checks++; if (v_uv != '0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
