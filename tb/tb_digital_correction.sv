// tb_digital_correction: self-checking test of the offset correction.
// Loads random calibration constants I_m and W_c, feeds K random operand
// pairs, builds for every cell the offset-laden sum the array would hold,
// quantizes it like the ADC and checks the corrected output against
// sum I*W recomputed here: exactly when the ADC step is one product unit,
// within the quantization error otherwise. Covers normal and chopping modes,
// result back-pressure, and the row order.
module tb_digital_correction;
  import macdo_pkg::*;
  localparam int ROWS = 4, COLS = 5, SHIFT = 0, CB = 20, RB = 24;
  logic clk = 0, rst = 1;
  logic acc_clear = 0, acc_en = 0, chop_mode = 0;
  logic signed [ROWS-1:0][IN_BITS-1:0] in_vec = '0;
  logic signed [COLS-1:0][W_BITS-1:0] w_vec = '0;
  logic cal_we = 0;
  logic [$clog2(ROWS*COLS+COLS)-1:0] cal_addr = '0;
  logic [7:0] cal_data = '0;
  logic code_valid = 0, code_pop;
  logic signed [COLS-1:0][CB-1:0] code_row = '0;
  logic res_valid, res_ready = 1;
  logic [$clog2(ROWS)-1:0] res_row;
  logic signed [COLS-1:0][RB-1:0] res_data;
  int checks = 0, failures = 0;

  // A code bus wider than the 6-bit ADC lets the check be exact.
  digital_correction #(.ROWS(ROWS), .COLS(COLS), .ADC_SHIFT(SHIFT), .RES_BITS(RB),
                       .CODE_BITS(CB)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int im [ROWS][COLS];
  int wc [COLS];
  int sum_out [ROWS][COLS];
  int sum_iw  [ROWS][COLS];

  task automatic run(int k, bit ch);
    int rows_seen = 0;
    @(negedge clk);
    chop_mode = ch; acc_clear = 1;
    @(negedge clk);
    acc_clear = 0;
    foreach (sum_out[r, c]) begin sum_out[r][c] = 0; sum_iw[r][c] = 0; end
    for (int i = 0; i < k; i++) begin
      for (int r = 0; r < ROWS; r++) in_vec[r] = IN_BITS'($urandom);
      for (int c = 0; c < COLS; c++) w_vec[c] = W_BITS'($urandom);
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          int x, w;
          x = int'($signed(in_vec[r])); w = int'($signed(w_vec[c]));
          sum_iw[r][c] += x * w;
          sum_out[r][c] += (x + im[r][c]) * (w + wc[c]);
          if (ch) sum_out[r][c] += (-x + im[r][c]) * (-w + wc[c]);
        end
      acc_en = 1;
      @(negedge clk);
      acc_en = 0;
      if ($urandom_range(0, 1)) @(negedge clk);
    end
    // feed rows of codes
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < COLS; c++) code_row[c] = CB'(sum_out[r][c] >>> SHIFT);
      code_valid = 1;
      do begin
        res_ready = ($urandom_range(0, 2) != 0);
        #1;
        if (res_valid && res_ready) begin
          for (int c = 0; c < COLS; c++)
            check(int'($signed(res_data[c])) == sum_iw[int'(res_row)][c], "corrected value");
          check(int'(res_row) == rows_seen, "row order");
          rows_seen++;
        end
        @(negedge clk);
      end while (!code_pop_seen());
      code_valid = 0;
    end
    res_ready = 1;
    while (rows_seen < ROWS) begin
      #1;
      if (res_valid) begin
        for (int c = 0; c < COLS; c++)
          check(int'($signed(res_data[c])) == sum_iw[int'(res_row)][c], "corrected value");
        check(int'(res_row) == rows_seen, "row order");
        rows_seen++;
      end
      @(negedge clk);
    end
  endtask

  bit popped;
  always @(posedge clk) popped <= code_pop;
  function automatic bit code_pop_seen();
    return popped;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    // calibration: I_m in -2..2 per cell, W_c in 8..11 per column
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        im[r][c] = $urandom_range(0, 4) - 2;
        @(negedge clk);
        cal_we = 1; cal_addr = 5'(r * COLS + c); cal_data = 8'(im[r][c]);
      end
    for (int c = 0; c < COLS; c++) begin
      wc[c] = 8 + $urandom_range(0, 3);
      @(negedge clk);
      cal_we = 1; cal_addr = 5'(ROWS * COLS + c); cal_data = 8'(wc[c]);
    end
    @(negedge clk); cal_we = 0;
    run(1, 0);
    run(17, 0);
    run(50, 1);
    run(200, 0);
    run(100, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
