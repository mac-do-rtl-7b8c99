// tb_rstring_dac: self-checking test of the DAC and polarity-switch model.
// For random row commands checks both word-line levels: HIGH and off levels,
// V_BASE + mag and V_BASE in the MAC phase, and the swap under S2.
module tb_rstring_dac;
  import macdo_pkg::*;
  localparam int ROWS = 8;
  row_drive_t drive [ROWS];
  int wl_q [ROWS], wl_qn [ROWS];
  int checks = 0, failures = 0;

  rstring_dac #(.ROWS(ROWS)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int lvl(wl_mode_e m, int dac);
    if (m == WL_HIGH) return 255;
    if (m == WL_DAC) return dac;
    return 0;
  endfunction

  initial begin
    for (int it = 0; it < 300; it++) begin
      for (int r = 0; r < ROWS; r++) begin
        drive[r].mode_p = wl_mode_e'($urandom_range(0, 2));
        drive[r].mode_n = (it % 3 == 0) ? drive[r].mode_p : wl_mode_e'($urandom_range(0, 2));
        drive[r].mag    = IN_BITS'($urandom_range(0, 8));
        drive[r].s2     = $urandom_range(0, 1);
        drive[r].s1     = !drive[r].s2 && ($urandom_range(0, 7) != 0);
      end
      #1;
      for (int r = 0; r < ROWS; r++) begin
        int p, n;
        p = lvl(drive[r].mode_p, 16 + int'(drive[r].mag));
        n = lvl(drive[r].mode_n, 16);
        if (drive[r].s2)      check(wl_q[r] == n && wl_qn[r] == p, "crossed");
        else if (drive[r].s1) check(wl_q[r] == p && wl_qn[r] == n, "straight");
        else                  check(wl_q[r] == 0 && wl_qn[r] == 0, "open");
        if (drive[r].mode_p == WL_DAC && drive[r].mode_n == WL_DAC && (drive[r].s1 || drive[r].s2))
          check((wl_q[r] - wl_qn[r]) == (drive[r].s2 ? -1 : 1) * int'(drive[r].mag), "differential input");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
