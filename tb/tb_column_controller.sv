// tb_column_controller: self-checking test of the weight offset, chopping
// negation, thermometer decoding and per-phase switch control.
module tb_column_controller;
  import macdo_pkg::*;
  localparam int COLS = 16;
  phase_e phase;
  logic negate;
  logic signed [COLS-1:0][W_BITS-1:0] w_vec;
  col_drive_t drive [COLS];
  logic [COLS-1:0][W_BITS:0] code;
  int checks = 0, failures = 0;

  column_controller #(.COLS(COLS)) dut (.*);

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
    phase_e ph [4] = '{PH_PRECHARGE, PH_MAC, PH_STANDBY, PH_READ_Q};
    for (int it = 0; it < 256; it++) begin
      phase  = ph[it % 4];
      negate = it[2];
      for (int c = 0; c < COLS; c++) w_vec[c] = W_BITS'(c - 8 + it);  // all 16 values
      #1;
      for (int c = 0; c < COLS; c++) begin
        int w, k, n;
        w = int'($signed(w_vec[c]));
        k = negate ? 8 - w : w + 8;
        check(int'(code[c]) == k, "offset code");
        n = $countones(drive[c].tail_en);
        case (phase)
          PH_MAC: begin
            check(n == k, "enabled tail switches");
            check(drive[c].tail_en == NUM_TAIL'((17'(1) << k) - 1), "thermometer form");
            check(drive[c].ck && !drive[c].ck_b && !drive[c].prec, "MAC switches");
          end
          PH_PRECHARGE: begin
            check(n == NUM_TAIL && drive[c].ck_b && !drive[c].ck && drive[c].prec, "precharge switches");
          end
          default: begin
            check(n == NUM_TAIL && drive[c].ck_b && !drive[c].ck && !drive[c].prec, "standby switches");
          end
        endcase
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
