// wl_dac: behavioural model of one wordline DAC (analog part, not synthesised
// as such).
//
// Converts a DAC_BITS input code into a wordline voltage. The full-scale
// code gives exactly VMAX_UV microvolts (0.3 V by default, the maximum input
// voltage of the scheme); intermediate codes are spaced linearly and rounded
// down to a whole microvolt. The conversion is combinational: the voltage
// follows the code in the same cycle.
//
// Ports: code (input code), v_uv (wordline voltage in microvolts).
// The 0.3 V full scale follows the scheme; the code width and the linear
// transfer are this design's choice.
module wl_dac
  import reram_pkg::*;
#(
  parameter int unsigned DAC_BITS = DAC_BITS_DEF,
  parameter int unsigned VMAX_UV  = VMAX_UV_DEF
) (
  input  logic [DAC_BITS-1:0] code,
  output logic [V_W-1:0]      v_uv
);

  localparam longint unsigned FULL_CODE = (64'd1 << DAC_BITS) - 64'd1;

  initial begin
    if (VMAX_UV >= (1 << V_W)) $fatal(1, "wl_dac: VMAX_UV does not fit V_W bits");
  end

  always_comb begin
    longint unsigned scaled;
    scaled = (longint'(code) * longint'(VMAX_UV)) / FULL_CODE;
    v_uv   = V_W'(scaled);
  end

endmodule
