// tb_calibration: finds the offset constants of the digital correction from
// test data of ones and zeros, as a host would, through the ports of the
// MAC-DO test circuit at its default size.
//
// With the calibration registers at their reset value (all zero) the circuit
// returns each cell's raw result, the ADC code times 2^ADC_SHIFT, i.e.
//     floor(K (I + I_m)(W + W_c) / 2^ADC_SHIFT) x 2^ADC_SHIFT
// for constant test vectors I, W in {0, 1}. The testbench applies the four
// combinations at three accumulation lengths K (12 operations), then solves
// for every cell the integer pair (I_m, W_c) that reproduces all twelve
// codes, and requires one W_c per column shared by all of its cells. The
// solved constants must be unique and equal the offsets the array model was
// built with; they are then written through cal_* and a random operation must
// come back exact apart from ADC quantization. The search ranges (I_m in
// -4..4, W_c in 0..20) are this testbench's choice.
module tb_calibration;
  import macdo_pkg::*;
  localparam int ROWS = 16, COLS = 16, SHIFT = 7, WO = 1, SPREAD = 1;
  localparam int RB = 24;
  localparam int NMEAS = 12;

  logic clk = 0, rst = 1;
  logic start = 0, chop = 0;
  logic [7:0] num_k = 0;
  logic busy, done, err;
  logic [15:0] stall_cycles;
  logic in_valid = 0, in_ready, w_valid = 0, w_ready;
  logic signed [ROWS-1:0][IN_BITS-1:0] in_data = '0;
  logic signed [COLS-1:0][W_BITS-1:0] w_data = '0;
  logic cal_we = 0;
  logic [8:0] cal_addr = '0;
  logic [7:0] cal_data = '0;
  logic res_valid, res_ready = 1;
  logic [3:0] res_row;
  logic signed [COLS-1:0][RB-1:0] res_data;

  macdo_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int res [ROWS][COLS];
  int ta [ROWS][$];
  int tw [COLS][$];

  // One operation with the operands in ta/tw; results into res
  task automatic run(int k);
    int rows_seen = 0, fed = 0, cyc = 0;
    @(negedge clk);
    num_k = 8'(k); chop = 0; start = 1;
    @(negedge clk);
    start = 0;
    check(!err && busy, "operation accepted");
    while (rows_seen < ROWS && cyc < 20000) begin
      bit give;
      give = (fed < k);
      in_valid = give; w_valid = give;
      if (give) begin
        for (int r = 0; r < ROWS; r++) in_data[r] = IN_BITS'(ta[r][fed]);
        for (int c = 0; c < COLS; c++) w_data[c] = W_BITS'(tw[c][fed]);
      end
      #1;
      if (give && !(in_ready && w_ready)) give = 0;
      if (res_valid) begin
        for (int c = 0; c < COLS; c++) res[int'(res_row)][c] = int'($signed(res_data[c]));
        rows_seen++;
      end
      @(negedge clk);
      if (give) fed++;
      cyc++;
    end
    in_valid = 0; w_valid = 0;
    check(rows_seen == ROWS, "all rows returned");
  endtask

  task automatic fill_const(int x, int w, int k);
    for (int r = 0; r < ROWS; r++) begin ta[r].delete(); repeat (k) ta[r].push_back(x); end
    for (int c = 0; c < COLS; c++) begin tw[c].delete(); repeat (k) tw[c].push_back(w); end
  endtask

  function automatic int raw(int k, int x, int w, int im, int wc);
    int q;
    q = (k * (x + im) * (w + wc)) >>> SHIFT;
    if (q > 31) q = 31;
    if (q < -32) q = -32;
    return q * (1 << SHIFT);
  endfunction

  int mk [NMEAS], mx [NMEAS], mw [NMEAS];
  int meas [NMEAS][ROWS][COLS];
  int im_sol [ROWS][COLS];
  int wc_sol [COLS];

  initial begin
    int ks [3] = '{200, 151, 97};
    int n;
    repeat (3) @(negedge clk);
    rst = 0;
    // 1. measurements with ones and zeros, calibration registers at reset
    n = 0;
    foreach (ks[i])
      for (int x = 0; x <= 1; x++)
        for (int w = 0; w <= 1; w++) begin
          mk[n] = ks[i]; mx[n] = x; mw[n] = w;
          fill_const(x, w, ks[i]);
          run(ks[i]);
          for (int r = 0; r < ROWS; r++)
            for (int c = 0; c < COLS; c++) meas[n][r][c] = res[r][c];
          n++;
        end
    // 2. solve: per column, the W_c values for which every cell has exactly
    //    one consistent I_m
    for (int c = 0; c < COLS; c++) begin
      int n_wc;
      n_wc = 0;
      for (int wc = 0; wc <= 20; wc++) begin
        bit col_ok;
        int im_try [ROWS];
        col_ok = 1;
        for (int r = 0; r < ROWS; r++) begin
          int n_im;
          n_im = 0;
          for (int im = -4; im <= 4; im++) begin
            bit ok;
            ok = 1;
            for (int m = 0; m < NMEAS; m++)
              if (raw(mk[m], mx[m], mw[m], im, wc) != meas[m][r][c]) ok = 0;
            if (ok) begin n_im++; im_try[r] = im; end
          end
          if (n_im != 1) col_ok = 0;
        end
        if (col_ok) begin
          n_wc++;
          wc_sol[c] = wc;
          for (int r = 0; r < ROWS; r++) im_sol[r][c] = im_try[r];
        end
      end
      check(n_wc == 1, "unique calibration solution for the column");
      check(wc_sol[c] == 8 + model_wo(c, WO), "solved W_c matches the array");
      for (int r = 0; r < ROWS; r++)
        check(im_sol[r][c] == model_im(r, c, SPREAD), "solved I_m matches the cell");
    end
    // 3. write the solved constants and run a random operation
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        cal_we = 1; cal_addr = 9'(r * COLS + c); cal_data = 8'(im_sol[r][c]);
        @(negedge clk);
      end
    for (int c = 0; c < COLS; c++) begin
      cal_we = 1; cal_addr = 9'(ROWS * COLS + c); cal_data = 8'(wc_sol[c]);
      @(negedge clk);
    end
    cal_we = 0;
    for (int r = 0; r < ROWS; r++) begin ta[r].delete(); repeat (40) ta[r].push_back($urandom_range(0, 15) - 8); end
    for (int c = 0; c < COLS; c++) begin tw[c].delete(); repeat (40) tw[c].push_back($urandom_range(0, 15) - 8); end
    run(40);
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        int exact, d;
        exact = 0;
        for (int i = 0; i < 40; i++) exact += ta[r][i] * tw[c][i];
        d = exact - res[r][c];
        check(d >= 0 && d < (1 << SHIFT), "calibrated result within one ADC step");
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
