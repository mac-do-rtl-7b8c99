// tb_macdo_top: end-to-end test of the MAC-DO test circuit at its default
// size (16 x 16 array, 4-bit inputs and weights, 6-bit ADCs).
//
// Each operation multiplies a random 16 x K input tile by a random K x 16
// weight tile. The expected result is worked out here in two ways: the exact
// product sum_k A[r][k] * B[k][c], and the value the circuit must return once
// the offset-laden analog sum has been quantized by the ADC and corrected.
// The second is checked exactly; the first within the ADC step whenever the
// ADC did not clip. Covered, and counted (each must occur): precharge, MAC and
// standby phases, negative inputs (crossed polarity switches), negative
// weights, chopping (analog correction), digital correction, stalls on empty
// buffers, result back-pressure, ADC clipping, and refusal of an operation
// longer than 200 MACs.
module tb_macdo_top;
  import macdo_pkg::*;
  localparam int ROWS = 16, COLS = 16, SHIFT = 7, WO = 1, SPREAD = 1;
  localparam int RB = 24;

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
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Mechanism counters
  int n_prec = 0, n_mac = 0, n_stby = 0, n_negin = 0, n_negw = 0, n_chop = 0,
      n_dcorr = 0, n_stall = 0, n_bp = 0, n_clip = 0, n_refused = 0;
  always @(posedge clk) if (!rst) begin
    if (dut.phase == PH_PRECHARGE) n_prec++;
    if (dut.phase == PH_MAC) begin
      n_mac++;
      if (dut.negate) n_chop++;
      for (int r = 0; r < ROWS; r++) if (dut.rdrive[r].s2) n_negin++;
      for (int c = 0; c < COLS; c++) if (dut.cur_w[c][W_BITS-1]) n_negw++;
    end
    if (dut.phase == PH_STANDBY) n_stby++;
    if (res_valid && !res_ready) n_bp++;
  end

  int a_m [ROWS][$];
  int b_m [COLS][$];

  task automatic run_op(int k, bit ch, int starve_pct, int bp_pct);
    int ref_iw [ROWS][COLS];
    int expect_res [ROWS][COLS];
    bit clipped [ROWS][COLS];
    int rows_seen = 0, fed = 0, cyc = 0;
    // random tiles
    for (int r = 0; r < ROWS; r++) begin a_m[r].delete(); for (int i = 0; i < k; i++) a_m[r].push_back($urandom_range(0, 15) - 8); end
    for (int c = 0; c < COLS; c++) begin b_m[c].delete(); for (int i = 0; i < k; i++) b_m[c].push_back($urandom_range(0, 15) - 8); end
    // reference
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        int so, si, sw, im, wc, q, est;
        im = model_im(r, c, SPREAD);
        wc = 8 + model_wo(c, WO);
        so = 0; si = 0; sw = 0; ref_iw[r][c] = 0;
        for (int i = 0; i < k; i++) begin
          int x, w;
          x = a_m[r][i]; w = b_m[c][i];
          ref_iw[r][c] += x * w;
          si += x; sw += w;
          so += (x + im) * (w + wc);
          if (ch) so += (-x + im) * (-w + wc);
        end
        q = so >>> SHIFT;
        clipped[r][c] = (q > 31 || q < -32);
        if (q > 31) q = 31;
        if (q < -32) q = -32;
        est = q * (1 << SHIFT);
        if (ch) expect_res[r][c] = (est - 2 * k * im * wc) >>> 1;
        else    expect_res[r][c] = est - im * sw - wc * si - k * im * wc;
      end
    // command
    @(negedge clk);
    num_k = 8'(k); chop = ch; start = 1;
    @(negedge clk);
    start = 0;
    check(!err && busy, "operation accepted");
    // feed buffers and collect results
    while (rows_seen < ROWS && cyc < 100000) begin
      bit give;
      give = (fed < k) && ($urandom_range(0, 99) >= starve_pct);
      in_valid = give; w_valid = give;
      if (give) begin
        for (int r = 0; r < ROWS; r++) in_data[r] = IN_BITS'(a_m[r][fed]);
        for (int c = 0; c < COLS; c++) w_data[c] = W_BITS'(b_m[c][fed]);
      end
      res_ready = ($urandom_range(0, 99) >= bp_pct);
      #1;
      if (give && !(in_ready && w_ready)) give = 0;
      if (res_valid && res_ready) begin
        int r;
        r = int'(res_row);
        check(r == rows_seen, "rows in order");
        for (int c = 0; c < COLS; c++) begin
          int got;
          got = int'($signed(res_data[c]));
          check(got == expect_res[r][c], "corrected result");
          if (clipped[r][c]) n_clip++;
          else begin
            int err_abs, bound;
            err_abs = (got > ref_iw[r][c]) ? got - ref_iw[r][c] : ref_iw[r][c] - got;
            bound = ch ? (1 << (SHIFT - 1)) : (1 << SHIFT);
            check(err_abs <= bound, "within one ADC step of A x B");
            n_dcorr++;
          end
        end
        rows_seen++;
      end
      @(negedge clk);
      if (give) fed++;
      cyc++;
    end
    in_valid = 0; w_valid = 0; res_ready = 1;
    check(rows_seen == ROWS, "all rows returned");
    @(negedge clk);
    check(!busy, "idle at the end");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    // calibration constants: I_m per cell, W_c = 2^(N-1) + W_o per column
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        cal_we = 1; cal_addr = 9'(r * COLS + c); cal_data = 8'(model_im(r, c, SPREAD));
        @(negedge clk);
      end
    for (int c = 0; c < COLS; c++) begin
      cal_we = 1; cal_addr = 9'(ROWS * COLS + c); cal_data = 8'(8 + model_wo(c, WO));
      @(negedge clk);
    end
    cal_we = 0;

    run_op(1, 0, 0, 0);
    run_op(16, 0, 0, 0);
    run_op(150, 0, 0, 0);          // one C3 array operation (K = 6 x 5 x 5)
    run_op(25, 0, 30, 40);         // stalls and back-pressure
    run_op(12, 1, 0, 0);           // chopping
    run_op(100, 1, 20, 20);
    run_op(200, 0, 0, 0);          // the longest accumulation allowed
    n_stall = int'(stall_cycles);
    // an operation longer than 200 MACs is refused
    @(negedge clk);
    num_k = 8'd201; chop = 0; start = 1;
    @(negedge clk);
    start = 0;
    #1 if (err && !busy) n_refused++;
    check(err && !busy, "over-long operation refused");
    run_op(3, 0, 0, 0);

    $display("mechanisms: precharge=%0d mac=%0d standby=%0d neg_input=%0d neg_weight=%0d chop=%0d corrected=%0d stall=%0d backpressure=%0d clip=%0d refused=%0d",
             n_prec, n_mac, n_stby, n_negin, n_negw, n_chop, n_dcorr, n_stall, n_bp, n_clip, n_refused);
    check(n_prec > 0, "precharge happened");
    check(n_mac > 0, "MAC happened");
    check(n_stby > 0, "standby happened");
    check(n_negin > 0, "negative input happened");
    check(n_negw > 0, "negative weight happened");
    check(n_chop > 0, "chopping happened");
    check(n_dcorr > 0, "digital correction happened");
    check(n_stall > 0, "stall happened");
    check(n_bp > 0, "back-pressure happened");
    check(n_clip > 0, "ADC clipping happened");
    check(n_refused > 0, "overflow refusal happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
