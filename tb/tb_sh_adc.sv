// tb_sh_adc: self-checking test of the sample-and-hold and ADC model.
// Samples random bit-line values on Ca then Cb, converts, and checks
// code = clip(floor((Cb - Ca) / 2^ADC_SHIFT)) per column and that valid
// rises CONV_CYCLES cycles after start.
module tb_sh_adc;
  import macdo_pkg::*;
  localparam int COLS = 4, SHIFT = 3, CONV = 2;
  logic clk = 0, rst = 1, sample_a = 0, sample_b = 0, start = 0, valid;
  int bl [COLS];
  logic signed [COLS-1:0][ADC_RES-1:0] code;
  int checks = 0, failures = 0, clipped = 0;

  sh_adc #(.COLS(COLS), .ADC_SHIFT(SHIFT), .CONV_CYCLES(CONV)) dut (.*);
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

  initial begin
    int a [COLS], b [COLS];
    foreach (bl[c]) bl[c] = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int it = 0; it < 300; it++) begin
      int span;
      span = (it % 3 == 0) ? 600 : 250;
      foreach (a[c]) begin a[c] = 1000 + $urandom_range(0, span); b[c] = 1000 + $urandom_range(0, span); end
      foreach (bl[c]) bl[c] = a[c];
      sample_a = 1;
      @(negedge clk);
      sample_a = 0;
      foreach (bl[c]) bl[c] = b[c];
      sample_b = 1;
      @(negedge clk);
      sample_b = 0;
      foreach (bl[c]) bl[c] = 77;          // bit lines move on; samples held
      start = 1;
      @(negedge clk);
      start = 0;
      for (int w = 0; w < CONV; w++) begin
        check(!valid, "not valid before conversion time");
        @(negedge clk);
      end
      check(valid, "valid after conversion time");
      foreach (a[c]) begin
        int q;
        q = (b[c] - a[c]) >>> SHIFT;
        if (q > 31) begin q = 31; clipped++; end
        if (q < -32) begin q = -32; clipped++; end
        check(int'($signed(code[c])) == q, "code");
      end
    end
    check(clipped > 0, "clipping exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
