// macdo_top: the MAC-DO test circuit, an output-stationary GEMM engine built
// from a DRAM-style array of charge-steering MAC cells.
//
// Data path (one operation = one ROWS x COLS tile of A x B, K outer products):
//   input vectors  -> input buffers  -> row controller    -> R-string DAC and
//                                                            switch blocks
//                                                            -> word lines
//   weight vectors -> weight buffers -> column controller -> weight blocks
//                                                            -> bit lines
//   MAC-DO array (accumulates in place) -> S/H and ADC, one row at a time
//   -> output buffers -> digital correction -> corrected results
// The overall controller runs precharge, K x (MAC, standby) and the row-wise
// readout. The array, weight blocks, DAC and ADC are behavioural models of
// analog parts; the controllers, buffers and digital correction are logic.
//
// Interface:
//   in_*      one signed IN_BITS input per array row per entry (a column of A)
//   w_*       one signed W_BITS weight per array column per entry (a row of B)
//   start     with num_k (K) and chop (analog chopping: every pair applied
//             twice, the second time negated); refused with err if K = 0 or
//             the MAC count exceeds MAX_MACS
//   cal_*     calibration constants I_m (per cell) and W_c (per column) of
//             the digital correction
//   res_*     corrected sums sum_k A[r][k] * B[k][c], one array row per beat,
//             rows 0 .. ROWS-1 in order, valid/ready handshake
// Parameters WO and IM_SPREAD set the offsets of the behavioural array model
// (ideal cells with WO = 0, IM_SPREAD = 0); ADC_SHIFT is the ADC step in
// product units. Sizes default to the 16 x 16, 4-bit/4-bit, 6-bit-ADC test
// circuit; buffer depths and ADC_SHIFT are this design's choices.
module macdo_top
  import macdo_pkg::*;
#(
  parameter int ROWS      = macdo_pkg::N_ROWS,
  parameter int COLS      = macdo_pkg::N_COLS,
  parameter int IN_DEPTH  = 16,
  parameter int W_DEPTH   = 16,
  parameter int OUT_DEPTH = 4,
  parameter int ADC_SHIFT = 7,
  parameter int RES_BITS  = 24,
  parameter int WO        = 1,
  parameter int IM_SPREAD = 1
) (
  input  logic                                  clk,
  input  logic                                  rst,
  // command and status
  input  logic                                  start,
  input  logic [7:0]                            num_k,
  input  logic                                  chop,
  output logic                                  busy,
  output logic                                  done,
  output logic                                  err,
  output logic [15:0]                           stall_cycles,
  // input matrix, one column per entry
  input  logic                                  in_valid,
  output logic                                  in_ready,
  input  logic signed [ROWS-1:0][IN_BITS-1:0]   in_data,
  // weight matrix, one row per entry
  input  logic                                  w_valid,
  output logic                                  w_ready,
  input  logic signed [COLS-1:0][W_BITS-1:0]    w_data,
  // calibration of the digital correction
  input  logic                                  cal_we,
  input  logic [$clog2(ROWS*COLS+COLS)-1:0]     cal_addr,
  input  logic [7:0]                            cal_data,
  // corrected results
  output logic                                  res_valid,
  input  logic                                  res_ready,
  output logic [$clog2(ROWS)-1:0]               res_row,
  output logic signed [COLS-1:0][RES_BITS-1:0]  res_data
);
  // Buffers
  logic                               ib_valid, ib_pop, wb_valid, wb_pop;
  logic [ROWS*IN_BITS-1:0]            ib_data;
  logic [COLS*W_BITS-1:0]             wb_data;
  logic                               ob_ready, ob_push, ob_valid, ob_pop;
  logic [COLS*ADC_RES-1:0]           ob_data;

  // Controller outputs
  phase_e                             phase;
  logic [$clog2(ROWS)-1:0]            read_row;
  logic                               negate, sample_a, sample_b, adc_start, adc_valid;
  logic                               acc_clear, acc_en, chop_mode;
  logic signed [ROWS-1:0][IN_BITS-1:0] cur_in;
  logic signed [COLS-1:0][W_BITS-1:0] cur_w;

  // Analog side
  row_drive_t                         rdrive [ROWS];
  col_drive_t                         cdrive [COLS];
  logic [COLS-1:0][W_BITS:0]          wcode;
  int                                 wl_q [ROWS];
  int                                 wl_qn [ROWS];
  int                                 bl [COLS];
  logic signed [COLS-1:0][ADC_RES-1:0] adc_code;

  vec_fifo #(.WIDTH(ROWS*IN_BITS), .DEPTH(IN_DEPTH)) u_input_buffers (
    .clk, .rst,
    .push_valid(in_valid), .push_ready(in_ready), .push_data(in_data),
    .pop_valid(ib_valid), .pop_ready(ib_pop), .pop_data(ib_data), .level()
  );

  vec_fifo #(.WIDTH(COLS*W_BITS), .DEPTH(W_DEPTH)) u_weight_buffers (
    .clk, .rst,
    .push_valid(w_valid), .push_ready(w_ready), .push_data(w_data),
    .pop_valid(wb_valid), .pop_ready(wb_pop), .pop_data(wb_data), .level()
  );

  overall_controller #(.ROWS(ROWS), .COLS(COLS)) u_ctrl (
    .clk, .rst,
    .start, .num_k, .chop, .busy, .done, .err,
    .in_valid(ib_valid), .in_data(ib_data), .in_pop(ib_pop),
    .w_valid(wb_valid), .w_data(wb_data), .w_pop(wb_pop),
    .phase, .read_row, .negate, .cur_in, .cur_w,
    .sample_a, .sample_b, .adc_start, .adc_valid,
    .out_ready(ob_ready), .out_push(ob_push),
    .acc_clear, .acc_en, .chop_mode, .stall_cycles
  );

  row_controller #(.ROWS(ROWS)) u_row_c (
    .phase, .read_row, .negate, .in_vec(cur_in), .drive(rdrive)
  );

  column_controller #(.COLS(COLS)) u_col_c (
    .phase, .negate, .w_vec(cur_w), .drive(cdrive), .code(wcode)
  );

  rstring_dac #(.ROWS(ROWS)) u_rdac (
    .drive(rdrive), .wl_q, .wl_qn
  );

  macdo_array #(.ROWS(ROWS), .COLS(COLS), .WO(WO), .IM_SPREAD(IM_SPREAD)) u_array (
    .clk, .wl_q, .wl_qn, .col(cdrive), .bl
  );

  sh_adc #(.COLS(COLS), .ADC_SHIFT(ADC_SHIFT)) u_adc (
    .clk, .rst, .bl, .sample_a, .sample_b, .start(adc_start),
    .valid(adc_valid), .code(adc_code)
  );

  vec_fifo #(.WIDTH(COLS*ADC_RES), .DEPTH(OUT_DEPTH)) u_output_buffers (
    .clk, .rst,
    .push_valid(ob_push), .push_ready(ob_ready), .push_data(adc_code),
    .pop_valid(ob_valid), .pop_ready(ob_pop), .pop_data(ob_data), .level()
  );

  // The operand sums are taken from the buffer outputs in the cycle the
  // controller latches them.
  digital_correction #(.ROWS(ROWS), .COLS(COLS), .ADC_SHIFT(ADC_SHIFT),
                       .RES_BITS(RES_BITS)) u_dcorr (
    .clk, .rst,
    .acc_clear, .acc_en, .chop_mode,
    .in_vec(ib_data), .w_vec(wb_data),
    .cal_we, .cal_addr, .cal_data,
    .code_valid(ob_valid), .code_row(ob_data), .code_pop(ob_pop),
    .res_valid, .res_ready, .res_row, .res_data
  );
endmodule
