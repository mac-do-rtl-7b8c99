// tb_lenet_layers: runs the layers of LeNet-5 (MNIST) through the MAC-DO test
// circuit at its default size, as a sequence of 16 x 16 output-stationary
// array operations, and compares every output with a direct convolution or
// matrix-vector product computed here from the tensors.
//
// Mapping: a layer becomes the product A (M x K) * B (K x N). Rows of the
// array hold M = output pixels (or images of a batch), columns hold N =
// output channels, and K = input channels x 5 x 5 (or input features) is the
// accumulation length. A layer is cut into ceil(M/16) x ceil(N/16) output
// tiles; when K is larger than what one precharge allows (200 MACs, or 100
// chopped pairs) the tile is accumulated in several array operations and the
// corrected partial results are added here, as a host would.
//
// Layer sizes (LeNet-5): C1 1x32x32 input, 6x1x5x5 filters; C3 6x14x14,
// 16x6x5x5; C5 16x5x5, 120x16x5x5 (K = 400, two passes); FC1 120 -> 84; FC2
// 84 -> 10. C5, FC1 and FC2 use a batch of 16 images so that the 16 rows are
// filled. Data are random signed 4-bit values; pooling and activations are
// not part of the circuit, so each layer gets its own random input.
//
// Each array operation is first checked exactly against the value the
// circuit must return (the offset-laden sum, floored to the 6-bit ADC step,
// clipped, then corrected); each layer output is then checked to lie within
// one ADC step per array operation of the exact integer result, unless a
// partial result clipped. C3 is also run with chopping, and over a batch of
// 4 images so that its 400 output pixels fill 25 tiles with no idle row.
module tb_lenet_layers;
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
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // GEMM operands, flattened: A[m*K + k], B[k*N + n], result C[m*N + n]
  int A[], B[], C[];
  bit Cclip[];
  int n_ops = 0, n_clip = 0;
  longint cycles0;
  longint cyc_now = 0;
  always @(posedge clk) cyc_now++;

  // One array operation: rows m0.., columns n0.., accumulation k0..k0+kl-1.
  // Adds the corrected results into C.
  task automatic array_op(int M, int N, int K, int m0, int n0, int k0, int kl, bit ch);
    int ta [ROWS][$];
    int tw [COLS][$];
    int expect_res [ROWS][COLS];
    bit clipped [ROWS][COLS];
    int rows_seen = 0, fed = 0, cyc = 0;
    for (int r = 0; r < ROWS; r++) begin
      ta[r].delete();
      for (int i = 0; i < kl; i++) ta[r].push_back((m0 + r < M) ? A[(m0 + r) * K + k0 + i] : 0);
    end
    for (int c = 0; c < COLS; c++) begin
      tw[c].delete();
      for (int i = 0; i < kl; i++) tw[c].push_back((n0 + c < N) ? B[(k0 + i) * N + n0 + c] : 0);
    end
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        int so, si, sw, im, wc, q, est;
        im = model_im(r, c, SPREAD);
        wc = 8 + model_wo(c, WO);
        so = 0; si = 0; sw = 0;
        for (int i = 0; i < kl; i++) begin
          si += ta[r][i]; sw += tw[c][i];
          so += (ta[r][i] + im) * (tw[c][i] + wc);
          if (ch) so += (-ta[r][i] + im) * (-tw[c][i] + wc);
        end
        q = so >>> SHIFT;
        clipped[r][c] = (q > 31 || q < -32);
        if (q > 31) q = 31;
        if (q < -32) q = -32;
        est = q * (1 << SHIFT);
        if (ch) expect_res[r][c] = (est - 2 * kl * im * wc) >>> 1;
        else    expect_res[r][c] = est - im * sw - wc * si - kl * im * wc;
      end
    @(negedge clk);
    num_k = 8'(kl); chop = ch; start = 1;
    @(negedge clk);
    start = 0;
    check(!err && busy, "array operation accepted");
    while (rows_seen < ROWS && cyc < 20000) begin
      bit give;
      give = (fed < kl);
      in_valid = give; w_valid = give;
      if (give) begin
        for (int r = 0; r < ROWS; r++) in_data[r] = IN_BITS'(ta[r][fed]);
        for (int c = 0; c < COLS; c++) w_data[c] = W_BITS'(tw[c][fed]);
      end
      #1;
      if (give && !(in_ready && w_ready)) give = 0;
      if (res_valid) begin
        int r;
        r = int'(res_row);
        check(r == rows_seen, "rows in order");
        for (int c = 0; c < COLS; c++) begin
          int got;
          got = int'($signed(res_data[c]));
          check(got == expect_res[r][c], "array result");
          if (m0 + r < M && n0 + c < N) begin
            C[(m0 + r) * N + n0 + c] += got;
            if (clipped[r][c]) begin Cclip[(m0 + r) * N + n0 + c] = 1; n_clip++; end
          end
        end
        rows_seen++;
      end
      @(negedge clk);
      if (give) fed++;
      cyc++;
    end
    in_valid = 0; w_valid = 0;
    check(rows_seen == ROWS, "all rows returned");
    n_ops++;
  endtask

  // Tiled GEMM; returns the number of array operations per output tile
  task automatic gemm(int M, int N, int K, bit ch, output int passes);
    int kmax;
    kmax = ch ? N_MAX_MACS / 2 : N_MAX_MACS;
    passes = (K + kmax - 1) / kmax;
    C = new[M * N];
    Cclip = new[M * N];
    foreach (C[i]) begin C[i] = 0; Cclip[i] = 0; end
    for (int m0 = 0; m0 < M; m0 += ROWS)
      for (int n0 = 0; n0 < N; n0 += COLS)
        for (int k0 = 0; k0 < K; k0 += kmax)
          array_op(M, N, K, m0, n0, k0, (K - k0 < kmax) ? K - k0 : kmax, ch);
  endtask

  function automatic int rnd4();
    return $urandom_range(0, 15) - 8;
  endfunction

  // Compare C with the direct result R (same layout)
  task automatic compare(string name, int R[], int passes, bit ch);
    int bad = 0, skipped = 0, bound;
    bound = passes * (ch ? (1 << (SHIFT - 1)) : (1 << SHIFT));
    foreach (R[i]) begin
      int d;
      if (Cclip[i]) begin skipped++; continue; end
      d = R[i] - C[i];
      if (d < 0) d = -d;
      check(d <= bound, name);
      if (d > bound) bad++;
    end
    $display("%s: %0d outputs, %0d array operations so far, %0d clipped, %0d outside +-%0d",
             name, R.size(), n_ops, skipped, bad, bound);
  endtask

  // Convolution layer, valid padding, stride 1, 5x5 filters, batch NB.
  // Input x[b][ci][y][x], filters f[co][ci][ky][kx], output o[b][co][y][x].
  task automatic conv_layer(string name, int NB, int CI, int H, int CO, bit ch);
    int x[], f[], R[];
    int HO, M, N, K, passes;
    HO = H - 4;
    M = NB * HO * HO; N = CO; K = CI * 25;
    x = new[NB * CI * H * H];
    f = new[CO * CI * 25];
    foreach (x[i]) x[i] = rnd4();
    foreach (f[i]) f[i] = rnd4();
    // im2col: row m = (b, oy, ox), column k = (ci, ky, kx)
    A = new[M * K];
    B = new[K * N];
    for (int b = 0; b < NB; b++)
      for (int oy = 0; oy < HO; oy++)
        for (int ox = 0; ox < HO; ox++)
          for (int ci = 0; ci < CI; ci++)
            for (int ky = 0; ky < 5; ky++)
              for (int kx = 0; kx < 5; kx++)
                A[((b * HO + oy) * HO + ox) * K + ci * 25 + ky * 5 + kx] =
                  x[((b * CI + ci) * H + oy + ky) * H + ox + kx];
    for (int co = 0; co < CO; co++)
      for (int k = 0; k < K; k++) B[k * N + co] = f[co * K + k];
    gemm(M, N, K, ch, passes);
    // direct convolution, laid out as C
    R = new[M * N];
    for (int b = 0; b < NB; b++)
      for (int co = 0; co < CO; co++)
        for (int oy = 0; oy < HO; oy++)
          for (int ox = 0; ox < HO; ox++) begin
            int s;
            s = 0;
            for (int ci = 0; ci < CI; ci++)
              for (int ky = 0; ky < 5; ky++)
                for (int kx = 0; kx < 5; kx++)
                  s += x[((b * CI + ci) * H + oy + ky) * H + ox + kx] *
                       f[((co * CI + ci) * 5 + ky) * 5 + kx];
            R[((b * HO + oy) * HO + ox) * N + co] = s;
          end
    compare(name, R, passes, ch);
  endtask

  // Fully connected layer y[b][o] = sum_i W[o][i] v[b][i]
  task automatic fc_layer(string name, int NB, int NI, int NO);
    int v[], w[], R[];
    int passes;
    v = new[NB * NI];
    w = new[NO * NI];
    foreach (v[i]) v[i] = rnd4();
    foreach (w[i]) w[i] = rnd4();
    A = new[NB * NI];
    B = new[NI * NO];
    foreach (v[i]) A[i] = v[i];
    for (int o = 0; o < NO; o++)
      for (int i = 0; i < NI; i++) B[i * NO + o] = w[o * NI + i];
    gemm(NB, NO, NI, 0, passes);
    R = new[NB * NO];
    for (int b = 0; b < NB; b++)
      for (int o = 0; o < NO; o++) begin
        int s;
        s = 0;
        for (int i = 0; i < NI; i++) s += w[o * NI + i] * v[b * NI + i];
        R[b * NO + o] = s;
      end
    compare(name, R, passes, 0);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
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

    cycles0 = cyc_now;
    conv_layer("C1", 1, 1, 32, 6, 0);
    $display("C1 took %0d clock cycles", cyc_now - cycles0);
    cycles0 = cyc_now;
    conv_layer("C3", 1, 6, 14, 16, 0);
    $display("C3 took %0d clock cycles", cyc_now - cycles0);
    cycles0 = cyc_now;
    conv_layer("C5", 16, 16, 5, 120, 0);
    $display("C5 (16 images) took %0d clock cycles", cyc_now - cycles0);
    fc_layer("FC1", 16, 120, 84);
    fc_layer("FC2", 16, 84, 10);
    conv_layer("C3_chopped", 1, 6, 14, 16, 1);
    // C3 scheduled across images: 4 x 100 output pixels fill 25 tiles exactly
    conv_layer("C3_4images", 4, 6, 14, 16, 0);
    check(n_ops == 49 + 7 + 16 + 6 + 1 + 14 + 25, "number of array operations");
    $display("array operations: %0d, clipped partial results: %0d", n_ops, n_clip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
