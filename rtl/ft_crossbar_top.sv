// ft_crossbar_top: a ReRAM crossbar MVM tile with online soft-error
// detection and correction.
//
// Datapath (one tile): input vector -> vector_select -> one wl_dac per
// wordline -> reram_crossbar -> one bl_adc per bitline -> digital_value_buffer.
// Before every multiplication the controller applies a test vector (maximum
// voltage on every wordline) in one extra cycle; the error_detector compares
// the RED_BITS LSBs of each column's ADC code with the reference LSBs held in
// the redundancy_store, and the reprogram_unit rewrites every mismatching
// column from the known weights before the input vector is applied. A column
// whose drift does not change its reference LSBs goes undetected; a stuck
// cell is detected on every MVM but cannot be repaired by rewriting.
//
// Interface:
//   cmd_valid / cmd_op / cmd_ready  PROGRAM or MVM command; in_vec is taken
//                                   with an MVM command (row i in in_vec[i]).
//   out_valid / out_codes           one-cycle result strobe, ADC code per column.
//   prog_done                       programming and calibration finished.
//   wt_req / wt_col / wt_valid / wt_data
//                                   column read of the known weights (kept
//                                   outside the tile); answered any time after
//                                   the request.
//   ref_wr_en / ref_wr_col / ref_wr_lsbs
//                                   optional direct load of reference LSBs.
//   inj_*                           fault injection into the crossbar model,
//                                   standing for physical runtime faults.
//   status: last_fault_vec, counters.
// Timing: a fault-free MVM returns out_valid 4 cycles after its command is
// accepted. An MVM that repairs k columns takes 6 + k * (1 + L + WRITE_CYCLES)
// cycles, where L is the number of cycles wt_req is high before wt_valid is
// seen (2 for a source that answers on the next clock edge).
//
// The detection scheme, the 4-LSB redundancy, 8-bit ADC, 128x128 array and
// 0.3 V test voltage follow the scheme; the handshakes, the command set and
// the cycle timing are this design's choices.
module ft_crossbar_top
  import reram_pkg::*;
#(
  parameter int unsigned ROWS         = ROWS_DEF,
  parameter int unsigned COLS         = COLS_DEF,
  parameter int unsigned DAC_BITS     = DAC_BITS_DEF,
  parameter int unsigned G_BITS       = G_BITS_DEF,
  parameter int unsigned ADC_BITS     = ADC_BITS_DEF,
  parameter int unsigned RED_BITS     = RED_BITS_DEF,
  parameter int unsigned VMAX_UV      = VMAX_UV_DEF,
  parameter int unsigned WRITE_CYCLES = WRITE_CYCLES_DEF
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // commands
  input  logic                          cmd_valid,
  input  cmd_e                          cmd_op,
  output logic                          cmd_ready,
  input  logic [ROWS-1:0][DAC_BITS-1:0] in_vec,
  // results
  output logic                          out_valid,
  output logic [COLS-1:0][ADC_BITS-1:0] out_codes,
  output logic                          prog_done,
  // known weights
  output logic                          wt_req,
  output logic [$clog2(COLS)-1:0]       wt_col,
  input  logic                          wt_valid,
  input  logic [ROWS*G_BITS-1:0]        wt_data,
  // direct reference load
  input  logic                          ref_wr_en,
  input  logic [$clog2(COLS)-1:0]       ref_wr_col,
  input  logic [RED_BITS-1:0]           ref_wr_lsbs,
  // fault injection (crossbar model)
  input  logic                          inj_en,
  input  logic [$clog2(ROWS)-1:0]       inj_row,
  input  logic [$clog2(COLS)-1:0]       inj_col,
  input  logic [G_BITS-1:0]             inj_level,
  input  logic                          inj_stuck,
  // status
  output ctrl_state_e                   state,
  output logic [COLS-1:0]               last_fault_vec,
  output logic [31:0]                   n_mvm,
  output logic [31:0]                   n_mvm_faulty,
  output logic [31:0]                   n_cols_flagged,
  output logic [31:0]                   n_cols_written
);

  localparam longint unsigned I_FS = longint'(ROWS) * longint'(VMAX_UV)
                                     * ((longint'(1) << G_BITS) - 1);

  logic                          in_load, buf_capture, cal_we;
  vsel_e                         vsel;
  logic [ROWS-1:0][DAC_BITS-1:0] dac_code;
  logic [ROWS-1:0][V_W-1:0]      v_wl;
  logic [COLS-1:0][I_W-1:0]      i_bl;
  logic [COLS-1:0][ADC_BITS-1:0] adc_code;
  logic [COLS-1:0][ADC_BITS-1:0] codes;
  logic [COLS-1:0][RED_BITS-1:0] ref_lsbs;
  logic [COLS-1:0]               fault_vec;
  logic                          any_fault;
  logic [$clog2(COLS+1)-1:0]     n_faulty;
  logic                          rp_start, rp_done, rp_busy;
  logic [COLS-1:0]               rp_mask;
  logic                          xb_wr_en;
  logic [$clog2(COLS)-1:0]       xb_wr_col;
  logic [ROWS*G_BITS-1:0]        xb_wr_data;

  ft_controller #(.COLS(COLS)) u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd_op, .cmd_ready,
    .in_load, .vsel, .buf_capture, .cal_we,
    .fault_vec, .any_fault,
    .rp_start, .rp_mask, .rp_done,
    .out_valid, .prog_done, .state,
    .last_fault_vec, .n_mvm, .n_mvm_faulty, .n_cols_flagged
  );

  vector_select #(.ROWS(ROWS), .DAC_BITS(DAC_BITS)) u_vsel (
    .clk, .rst_n, .in_load, .in_vec, .sel(vsel), .dac_code
  );

  for (genvar r = 0; r < ROWS; r++) begin : g_dac
    wl_dac #(.DAC_BITS(DAC_BITS), .VMAX_UV(VMAX_UV)) u_dac (
      .code(dac_code[r]), .v_uv(v_wl[r])
    );
  end

  reram_crossbar #(.ROWS(ROWS), .COLS(COLS), .G_BITS(G_BITS)) u_xbar (
    .clk, .rst_n,
    .wr_en(xb_wr_en), .wr_col(xb_wr_col), .wr_data(xb_wr_data),
    .inj_en, .inj_row, .inj_col, .inj_level, .inj_stuck,
    .v_wl, .i_bl
  );

  for (genvar c = 0; c < COLS; c++) begin : g_adc
    bl_adc #(.ADC_BITS(ADC_BITS), .I_FS(I_FS)) u_adc (
      .i_bl(i_bl[c]), .code(adc_code[c])
    );
  end

  digital_value_buffer #(.COLS(COLS), .ADC_BITS(ADC_BITS)) u_buf (
    .clk, .rst_n, .capture(buf_capture), .adc_code, .codes
  );

  redundancy_store #(.COLS(COLS), .ADC_BITS(ADC_BITS), .RED_BITS(RED_BITS)) u_ref (
    .clk, .cal_we, .cal_codes(codes),
    .wr_en(ref_wr_en), .wr_col(ref_wr_col), .wr_lsbs(ref_wr_lsbs),
    .ref_lsbs
  );

  error_detector #(.COLS(COLS), .ADC_BITS(ADC_BITS), .RED_BITS(RED_BITS)) u_det (
    .codes, .ref_lsbs, .fault_vec, .any_fault, .n_faulty
  );

  reprogram_unit #(.ROWS(ROWS), .COLS(COLS), .G_BITS(G_BITS), .WRITE_CYCLES(WRITE_CYCLES)) u_rp (
    .clk, .rst_n,
    .start(rp_start), .mask(rp_mask), .busy(rp_busy), .done(rp_done),
    .wt_req, .wt_col, .wt_valid, .wt_data,
    .xb_wr_en, .xb_wr_col, .xb_wr_data,
    .cols_written(n_cols_written)
  );

  assign out_codes = codes;

endmodule
