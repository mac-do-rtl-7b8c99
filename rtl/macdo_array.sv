// macdo_array: behavioural model of the ROWS x COLS MAC-DO array.
//
// This is a model of an analog part, not logic to synthesize. The array is an
// ordinary DRAM array regrouped into MAC-DO cells: each row's input is
// broadcast on its two word lines to every cell of the row, and each column's
// weight block hangs on its bit line and sets the gain of every cell of the
// column. Every MAC phase therefore adds the outer product of the row inputs
// and the column weights to the ROWS x COLS stored results (output
// stationary). For readout the row controller raises one word line of one row
// and the bit lines carry that row's V_Q (or V_QN) values to the sample-and-
// hold capacitors; with no word line HIGH a bit line reads 0.
//
// Cell mismatch I_m and column parasitics W_o come from the model functions
// in macdo_pkg (IM_SPREAD = 0 gives ideal cells). The structure follows the
// paper; the offset pattern is this model's own.
module macdo_array
  import macdo_pkg::*;
#(
  parameter int ROWS      = macdo_pkg::N_ROWS,
  parameter int COLS      = macdo_pkg::N_COLS,
  parameter int WO        = 1,
  parameter int IM_SPREAD = 1
) (
  input  logic       clk,
  input  int         wl_q  [ROWS],
  input  int         wl_qn [ROWS],
  input  col_drive_t col   [COLS],
  output int         bl    [COLS]
);
  int tail [COLS];
  int vq   [ROWS][COLS];
  int vqn  [ROWS][COLS];

  for (genvar c = 0; c < COLS; c++) begin : g_col
    weight_block #(.WO(model_wo(c, WO))) u_wb (
      .clk, .drive(col[c]), .tail_units(tail[c])
    );
    for (genvar r = 0; r < ROWS; r++) begin : g_row
      macdo_cell #(.IM(model_im(r, c, IM_SPREAD))) u_cell (
        .clk,
        .wl_q(wl_q[r]), .wl_qn(wl_qn[r]),
        .tail_units(tail[c]), .prec(col[c].prec),
        .vq(vq[r][c]), .vqn(vqn[r][c])
      );
    end
  end

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      bl[c] = 0;
      if (!col[c].prec)
        for (int r = 0; r < ROWS; r++) begin
          if (wl_q[r]  == V_HIGH) bl[c] = vq[r][c];
          if (wl_qn[r] == V_HIGH) bl[c] = vqn[r][c];
        end
    end
  end
endmodule
