// tb_macdo_array: self-checking test of the array model.
// Drives word lines and column switches directly: precharge, K random outer
// products (MAC + standby), then reads every row through the bit lines (V_Q
// word line, then V_QN word line) and checks
//   V_QN - V_Q = sum_k (I_k[r] + I_m[r][c]) x (code_k[c] + W_o[c])
// for every cell, and that every cell reads VDD right after precharge.
module tb_macdo_array;
  import macdo_pkg::*;
  localparam int ROWS = 3, COLS = 4, WO = 2, SPREAD = 1;
  logic clk = 0;
  int wl_q [ROWS], wl_qn [ROWS];
  col_drive_t col [COLS];
  int bl [COLS];
  int checks = 0, failures = 0;

  macdo_array #(.ROWS(ROWS), .COLS(COLS), .WO(WO), .IM_SPREAD(SPREAD)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic set_cols(bit ck, bit ckb, bit prec, int code [COLS]);
    for (int c = 0; c < COLS; c++) begin
      col[c].ck = ck; col[c].ck_b = ckb; col[c].prec = prec;
      col[c].tail_en = ck ? NUM_TAIL'((17'(1) << code[c]) - 1) : '1;
    end
  endtask

  task automatic read_row(int r, output int q [COLS], output int qn [COLS]);
    int none [COLS];
    set_cols(0, 1, 0, none);
    foreach (wl_q[i]) begin wl_q[i] = 0; wl_qn[i] = 0; end
    wl_q[r] = 255;
    #1 foreach (bl[c]) q[c] = bl[c];
    @(negedge clk);
    wl_q[r] = 0; wl_qn[r] = 255;
    #1 foreach (bl[c]) qn[c] = bl[c];
    @(negedge clk);
    wl_qn[r] = 0;
  endtask

  initial begin
    int acc [ROWS][COLS];
    int code [COLS];
    int q [COLS], qn [COLS];
    for (int op = 0; op < 6; op++) begin
      int k;
      k = 1 + op * 17;
      @(negedge clk);
      // precharge
      foreach (wl_q[i]) begin wl_q[i] = 255; wl_qn[i] = 255; end
      set_cols(0, 1, 1, code);
      @(negedge clk);
      foreach (acc[r, c]) acc[r][c] = 0;
      for (int r = 0; r < ROWS; r++) begin
        read_row(r, q, qn);
        foreach (q[c]) check(q[c] == (1 << 20) && qn[c] == (1 << 20), "precharged cells");
      end
      for (int i = 0; i < k; i++) begin
        int x [ROWS];
        foreach (x[r]) x[r] = $urandom_range(0, 16) - 8;
        foreach (code[c]) code[c] = $urandom_range(0, 16);
        for (int r = 0; r < ROWS; r++) begin
          wl_q[r]  = 16 + ((x[r] > 0) ? x[r] : 0);
          wl_qn[r] = 16 + ((x[r] < 0) ? -x[r] : 0);
        end
        set_cols(1, 0, 0, code);
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < COLS; c++)
            acc[r][c] += (x[r] + model_im(r, c, SPREAD)) * (code[c] + model_wo(c, WO));
        @(negedge clk);
        foreach (wl_q[r]) begin wl_q[r] = 0; wl_qn[r] = 0; end
        set_cols(0, 1, 0, code);
        @(negedge clk);
      end
      for (int r = 0; r < ROWS; r++) begin
        read_row(r, q, qn);
        foreach (q[c]) check(qn[c] - q[c] == acc[r][c], "cell result through bit lines");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
