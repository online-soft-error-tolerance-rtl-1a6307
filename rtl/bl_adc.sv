// bl_adc: behavioural model of one bitline ADC (analog part, not synthesised
// as such).
//
// Quantises a bitline current into an ADC_BITS code (8 bits by default, as in
// the scheme). The conversion range is 0 .. I_FS, where I_FS is the current of
// a column whose cells all hold the highest conductance level while every
// wordline is at the maximum voltage. The transfer is
//     code = floor(i * 2**ADC_BITS / (I_FS + 1)),
// saturating at the top code. It is combinational; the digital value buffer
// samples it.
//
// Ports: i_bl (bitline current, microvolt * level units), code.
// The resolution follows the scheme; the full-scale choice and the linear
// floor transfer are this design's choice.
module bl_adc
  import reram_pkg::*;
#(
  parameter int unsigned ADC_BITS = ADC_BITS_DEF,
  parameter longint unsigned I_FS = longint'(ROWS_DEF) * longint'(VMAX_UV_DEF)
                                    * ((longint'(1) << G_BITS_DEF) - 1)
) (
  input  logic [I_W-1:0]      i_bl,
  output logic [ADC_BITS-1:0] code
);

  localparam longint unsigned TOP_CODE = (64'd1 << ADC_BITS) - 64'd1;

  always_comb begin
    longint unsigned q;
    q = (longint'(i_bl) << ADC_BITS) / (I_FS + 64'd1);
    if (q > TOP_CODE) q = TOP_CODE;
    code = ADC_BITS'(q);
  end

endmodule
