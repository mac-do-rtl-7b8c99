// tb_row_controller: self-checking test of the word-line and polarity control.
// For every phase, random signed inputs, random readout row and both chopping
// polarities, compares each row's command with values worked out here.
module tb_row_controller;
  import macdo_pkg::*;
  localparam int ROWS = 16;
  phase_e phase;
  logic [$clog2(ROWS)-1:0] read_row;
  logic negate;
  logic signed [ROWS-1:0][IN_BITS-1:0] in_vec;
  row_drive_t drive [ROWS];
  int checks = 0, failures = 0;

  row_controller #(.ROWS(ROWS)) dut (.*);

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

  initial begin
    phase_e ph [5] = '{PH_PRECHARGE, PH_MAC, PH_STANDBY, PH_READ_Q, PH_READ_QN};
    for (int it = 0; it < 400; it++) begin
      phase    = ph[it % 5];
      negate   = it[3];
      read_row = 4'($urandom);
      for (int r = 0; r < ROWS; r++) in_vec[r] = IN_BITS'($urandom);
      if (it < 16) in_vec[0] = IN_BITS'(it - 8);  // every input value on row 0
      #1;
      for (int r = 0; r < ROWS; r++) begin
        int v, m;
        bit flip;
        v = int'($signed(in_vec[r]));
        m = (v < 0) ? -v : v;
        flip = (v < 0) ^ negate;
        case (phase)
          PH_PRECHARGE: begin
            check(drive[r].mode_p == WL_HIGH && drive[r].mode_n == WL_HIGH, "precharge WLs high");
          end
          PH_MAC: begin
            check(drive[r].mode_p == WL_DAC && drive[r].mode_n == WL_DAC, "MAC WLs from DAC");
            check(int'(drive[r].mag) == m, "magnitude");
            check(drive[r].s2 == flip && drive[r].s1 == !flip, "polarity switches");
          end
          PH_STANDBY: begin
            check(drive[r].mode_p == WL_OFF && drive[r].mode_n == WL_OFF, "standby WLs off");
          end
          PH_READ_Q: begin
            check(drive[r].mode_p == ((r == int'(read_row)) ? WL_HIGH : WL_OFF), "read V_Q WL");
            check(drive[r].mode_n == WL_OFF, "read V_Q other WL off");
          end
          PH_READ_QN: begin
            check(drive[r].mode_n == ((r == int'(read_row)) ? WL_HIGH : WL_OFF), "read V_QN WL");
            check(drive[r].mode_p == WL_OFF, "read V_QN other WL off");
          end
          default: ;
        endcase
        if (phase != PH_MAC) check(drive[r].s1 && !drive[r].s2, "straight outside MAC");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
