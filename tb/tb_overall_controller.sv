// tb_overall_controller: self-checking test of the operation sequencer.
// Buffers and ADC are stood in for by the testbench. Checks, per operation:
// precharge comes first; exactly K MAC phases (2K with chopping, the second
// of each pair negated) each followed by standby; the vectors latched are the
// ones offered, in order; readout visits rows 0..ROWS-1, each as read V_Q,
// read V_QN, convert; one push per row and a done pulse on the last. Also
// checks the refusal of K = 0 and of more than MAX_MACS MACs, stall counting
// when the buffers run dry, and the 2-cycles-per-MAC rate without stalls.
module tb_overall_controller;
  import macdo_pkg::*;
  localparam int ROWS = 4, COLS = 3;
  logic clk = 0, rst = 1;
  logic start = 0, chop = 0;
  logic [7:0] num_k = 0;
  logic busy, done, err;
  logic in_valid = 0, w_valid = 0, in_pop, w_pop;
  logic signed [ROWS-1:0][IN_BITS-1:0] in_data = '0;
  logic signed [COLS-1:0][W_BITS-1:0] w_data = '0;
  phase_e phase;
  logic [$clog2(ROWS)-1:0] read_row;
  logic negate;
  logic signed [ROWS-1:0][IN_BITS-1:0] cur_in;
  logic signed [COLS-1:0][W_BITS-1:0] cur_w;
  logic sample_a, sample_b, adc_start, adc_valid = 0, out_ready = 1, out_push;
  logic acc_clear, acc_en, chop_mode;
  logic [15:0] stall_cycles;
  int checks = 0, failures = 0;

  overall_controller #(.ROWS(ROWS), .COLS(COLS)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ADC stand-in: valid two cycles after start, until the next start.
  int adc_cnt = 0;
  always @(posedge clk) begin
    if (adc_start) begin adc_valid <= 0; adc_cnt <= 2; end
    else if (adc_cnt > 0) begin adc_cnt <= adc_cnt - 1; if (adc_cnt == 1) adc_valid <= 1; end
  end

  // Run one operation and check its sequence.
  task automatic run_op(int k, bit ch, int starve_pct);
    int macs = 0, neg_macs = 0, pops = 0, pushes = 0, cyc = 0, first_mac = -1, last_stb = -1;
    int exp_row = 0, expect_vec = 0;
    phase_e prev = PH_IDLE;
    bit saw_done = 0;
    logic [ROWS*IN_BITS-1:0] latched;
    @(negedge clk);
    num_k = 8'(k); chop = ch; start = 1;
    @(negedge clk);
    start = 0;
    check(phase == PH_PRECHARGE, "precharge first");
    while (!saw_done && cyc < 20000) begin
      // buffer stand-ins: offer vector number `pops`
      in_valid = ($urandom_range(0, 99) >= starve_pct);
      w_valid  = ($urandom_range(0, 99) >= starve_pct);
      in_data  = (ROWS*IN_BITS)'(pops * 7 + 1);
      w_data   = (COLS*W_BITS)'(pops * 5 + 2);
      out_ready = ($urandom_range(0, 3) != 0);
      #1;
      if (in_pop) begin
        check(w_pop && in_valid && w_valid, "pop only with both buffers valid");
        latched = in_data;
        pops++;
      end
      if (phase == PH_MAC) begin
        if (first_mac < 0) first_mac = cyc;
        macs++;
        if (negate) neg_macs++;
        check(cur_in == in_data_of(pops - 1), "MAC uses latched input");
        if (ch) check(negate == (macs % 2 == 0), "chopping alternates");
      end
      if (prev == PH_MAC) check(phase == PH_STANDBY, "standby after MAC");
      if (phase == PH_STANDBY) last_stb = cyc;
      if (phase == PH_READ_Q) begin
        check(int'(read_row) == exp_row, "row order");
        check(sample_a && !sample_b, "sample Ca");
        check(macs == (ch ? 2 * k : k), "MAC count before readout");
      end
      if (phase == PH_READ_QN) check(prev == PH_READ_Q && sample_b, "sample Cb after Ca");
      if (out_push) begin
        check(int'(read_row) == exp_row && adc_valid && out_ready, "push row");
        pushes++; exp_row++;
        if (done) saw_done = 1;
      end
      prev = phase;
      @(negedge clk);
      cyc++;
    end
    check(saw_done, "done seen");
    check(pushes == ROWS, "one push per row");
    check(pops == k, "one vector pair per K");
    check(neg_macs == (ch ? k : 0), "negated MACs");
    check(phase == PH_IDLE && !busy, "idle after done");
    if (starve_pct == 0)
      check(last_stb - first_mac + 1 == 2 * (ch ? 2 * k : k), "two cycles per MAC");
    in_valid = 0; w_valid = 0;
  endtask

  function automatic logic [ROWS*IN_BITS-1:0] in_data_of(int n);
    return (ROWS*IN_BITS)'(n * 7 + 1);
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    run_op(1, 0, 0);
    run_op(5, 0, 0);
    run_op(4, 1, 0);
    run_op(9, 0, 40);
    check(stall_cycles > 0, "stalls counted");
    run_op(200, 0, 0);
    run_op(100, 1, 0);
    // refusals
    @(negedge clk); num_k = 0; chop = 0; start = 1;
    @(negedge clk); start = 0; #1;
    check(err && phase == PH_IDLE, "K = 0 refused");
    @(negedge clk); num_k = 101; chop = 1; start = 1;
    @(negedge clk); start = 0; #1;
    check(err && phase == PH_IDLE, "2K > MAX_MACS refused");
    @(negedge clk); num_k = 201; chop = 0; start = 1;
    @(negedge clk); start = 0; #1;
    check(err && phase == PH_IDLE, "K > MAX_MACS refused");
    run_op(3, 0, 0);
    check(!err, "err cleared by accepted start");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
