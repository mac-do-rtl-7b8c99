// digital_correction: removes the cell and weight offsets from the ADC results.
//
// A real cell computes (I + I_m) x (W + W_c) per MAC instead of I x W: I_m is
// the input-referred mismatch offset of that cell and W_c = W_o + 2^(N-1) is
// the weight offset of its column (parasitic tail capacitance W_o plus the
// digital shift that makes every weight positive). After K MACs a cell holds
//     sum OUT = sum I*W + I_m*sum W + W_c*sum I + K*I_m*W_c
// so this block keeps, while the array runs, sum I for every row and sum W for
// every column (shared by all cells of that row or column) and returns
//     normal   sum I*W = sum OUT - I_m*sum W - W_c*sum I - K*I_m*W_c
//     chopping sum I*W = (sum OUT - 2*K*I_m*W_c) / 2
// where in chopping mode every pair was applied once as (I, W) and once as
// (-I, -W), cancelling the linear offset terms in the analog domain: each
// pair adds 2*(I*W + I_m*W_c), so K pairs leave 2*K*I_m*W_c to remove. (The
// paper's closed form writes the constant as sum I_m*W_c inside the halving;
// the pairwise identity it derives from gives the factor 2 used here.)
//
// sum OUT is rebuilt from the ADC code as code x 2^ADC_SHIFT (the ADC step in
// product units; CODE_BITS is the ADC resolution). I_m and W_c are calibration constants written through the
// cal_* port: addresses 0 .. ROWS*COLS-1 hold I_m of cell (r, c) at r*COLS+c,
// the next COLS addresses hold W_c of each column. How they are measured
// (test data of ones and zeros) is left to the host.
//
// The two formulas follow the paper. The integer offset format, the shift
// back to product units and the register-file calibration port are this
// design's choices. Timing: one row is taken from the output buffer when the
// result register is free, and appears on res_* one cycle later with its row
// number; rows arrive in order 0 .. ROWS-1 after each acc_clear.
module digital_correction
  import macdo_pkg::*;
#(
  parameter int ROWS      = macdo_pkg::N_ROWS,
  parameter int COLS      = macdo_pkg::N_COLS,
  parameter int ADC_SHIFT = 7,
  parameter int IM_BITS   = 4,
  parameter int WC_BITS   = 8,
  parameter int RES_BITS  = 24,
  parameter int CODE_BITS = macdo_pkg::ADC_RES
) (
  input  logic                                  clk,
  input  logic                                  rst,
  // operand accumulation
  input  logic                                  acc_clear,
  input  logic                                  acc_en,
  input  logic                                  chop_mode,
  input  logic signed [ROWS-1:0][IN_BITS-1:0]   in_vec,
  input  logic signed [COLS-1:0][W_BITS-1:0]    w_vec,
  // calibration constants
  input  logic                                  cal_we,
  input  logic [$clog2(ROWS*COLS+COLS)-1:0]     cal_addr,
  input  logic [WC_BITS-1:0]                    cal_data,
  // ADC codes from the output buffer
  input  logic                                  code_valid,
  input  logic signed [COLS-1:0][CODE_BITS-1:0] code_row,
  output logic                                  code_pop,
  // corrected results
  output logic                                  res_valid,
  input  logic                                  res_ready,
  output logic [$clog2(ROWS)-1:0]               res_row,
  output logic signed [COLS-1:0][RES_BITS-1:0]  res_data
);
  localparam int SUMW = 20;

  logic signed [IM_BITS-1:0]  im [ROWS][COLS];
  logic        [WC_BITS-1:0]  wc [COLS];
  logic signed [SUMW-1:0]     sum_i [ROWS];
  logic signed [SUMW-1:0]     sum_w [COLS];
  logic        [8:0]          k_cnt;
  logic                       chop_q;
  logic [$clog2(ROWS)-1:0]    row_cnt;

  // Calibration register file.
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) im[r][c] <= '0;
      for (int c = 0; c < COLS; c++) wc[c] <= '0;
    end else if (cal_we) begin
      if (int'(cal_addr) < ROWS*COLS)
        im[int'(cal_addr) / COLS][int'(cal_addr) % COLS] <= cal_data[IM_BITS-1:0];
      else if (int'(cal_addr) < ROWS*COLS + COLS)
        wc[int'(cal_addr) - ROWS*COLS] <= cal_data;
    end
  end

  // Digital accumulation of the operands, once per outer product.
  always_ff @(posedge clk) begin
    if (rst || acc_clear) begin
      for (int r = 0; r < ROWS; r++) sum_i[r] <= '0;
      for (int c = 0; c < COLS; c++) sum_w[c] <= '0;
      k_cnt  <= '0;
    end else if (acc_en) begin
      for (int r = 0; r < ROWS; r++) sum_i[r] <= sum_i[r] + SUMW'($signed(in_vec[r]));
      for (int c = 0; c < COLS; c++) sum_w[c] <= sum_w[c] + SUMW'($signed(w_vec[c]));
      k_cnt <= k_cnt + 1'b1;
    end
    if (rst) chop_q <= 1'b0;
    else if (acc_clear) chop_q <= chop_mode;
  end

  assign code_pop = code_valid && (!res_valid || res_ready);

  always_ff @(posedge clk) begin
    if (rst || acc_clear) begin
      res_valid <= 1'b0;
      row_cnt   <= '0;
      res_row   <= '0;
      res_data  <= '0;
    end else begin
      if (res_valid && res_ready) res_valid <= 1'b0;
      if (code_pop) begin
        for (int c = 0; c < COLS; c++) begin
          logic signed [39:0] out_sum, imv, wcv, corr;
          out_sum = 40'($signed(code_row[c])) <<< ADC_SHIFT;
          imv     = 40'(im[row_cnt][c]);
          wcv     = 40'(signed'({1'b0, wc[c]}));
          if (chop_q)
            corr = (out_sum - 40'(signed'({k_cnt, 1'b0})) * imv * wcv) >>> 1;
          else
            corr = out_sum - imv * 40'(sum_w[c]) - wcv * 40'(sum_i[row_cnt])
                   - 40'(signed'({1'b0, k_cnt})) * imv * wcv;
          res_data[c] <= RES_BITS'(corr);
        end
        res_row   <= row_cnt;
        row_cnt   <= row_cnt + 1'b1;
        res_valid <= 1'b1;
      end
    end
  end
endmodule
