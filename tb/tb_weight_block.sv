// tb_weight_block: self-checking test of the tail capacitor bank model.
// Checks tail_units = enabled capacitors + W_o in a MAC phase after a reset,
// 0 outside it, and that a bank not reset between two MAC phases only offers
// the capacitors that were not used in the first.
module tb_weight_block;
  import macdo_pkg::*;
  localparam int WO = 3;
  logic clk = 0;
  col_drive_t drive;
  int tail_units;
  int checks = 0, failures = 0;

  weight_block #(.WO(WO)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic reset_phase();
    drive = '{tail_en: '1, ck: 0, ck_b: 1, prec: 0};
    #1 check(tail_units == 0, "no tail outside MAC");
    @(negedge clk);
  endtask

  task automatic mac_phase(int n, int expect_units);
    drive = '{tail_en: NUM_TAIL'((17'(1) << n) - 1), ck: 1, ck_b: 0, prec: 0};
    #1 check(tail_units == expect_units, "tail units in MAC");
    @(negedge clk);
  endtask

  initial begin
    @(negedge clk);
    reset_phase();
    for (int n = 0; n <= NUM_TAIL; n++) begin
      mac_phase(n, n + WO);
      reset_phase();
    end
    // two MAC phases without a reset between them
    for (int it = 0; it < 50; it++) begin
      int a, b;
      a = $urandom_range(0, NUM_TAIL); b = $urandom_range(0, NUM_TAIL);
      mac_phase(a, a + WO);
      mac_phase(b, WO + ((b > a) ? b - a : 0));
      reset_phase();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
