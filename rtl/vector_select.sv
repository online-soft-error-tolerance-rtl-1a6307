// vector_select: chooses what the wordline DACs see.
//
// The scheme applies two vectors per MVM: first a test vector equal to the
// maximum applicable input on every wordline (the "1" column of the input
// stage), then the real input vector (the "2" column). The input vector
// arrives with the MVM command but is applied only after the test cycle and
// any column repair, so this block holds it in a register loaded by in_load.
//
// Ports: in_load / in_vec load the input register (row i in
// in_vec[i]); sel picks VSEL_TEST (every code at its maximum), VSEL_INPUT
// (the held vector) or VSEL_OFF (all zero). dac_code is combinational from
// sel and the register, so a selection takes effect in the same cycle.
// The two-step test/input order follows the scheme; the holding register and
// the OFF selection are this design's choice.
module vector_select
  import reram_pkg::*;
#(
  parameter int unsigned ROWS     = ROWS_DEF,
  parameter int unsigned DAC_BITS = DAC_BITS_DEF
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_load,
  input  logic [ROWS-1:0][DAC_BITS-1:0] in_vec,
  input  vsel_e                         sel,
  output logic [ROWS-1:0][DAC_BITS-1:0] dac_code
);

  logic [ROWS-1:0][DAC_BITS-1:0] held;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       held <= '0;
    else if (in_load) held <= in_vec;
  end

  always_comb begin
    unique case (sel)
      VSEL_TEST:  dac_code = '1;
      VSEL_INPUT: dac_code = held;
      default:    dac_code = '0;
    endcase
  end

endmodule
