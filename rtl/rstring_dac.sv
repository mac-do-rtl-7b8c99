// rstring_dac: behavioural model of the R-string DAC, its switch blocks and
// the S1/S2 polarity switches of every row.
//
// This is a model of an analog part, not logic to synthesize. A resistor
// string supplies a ladder of voltages; per row a switch block picks the tap
// for the word line of V_Q (Vin(+)) and the tap for the word line of V_QN
// (Vin(-)), and a pair of straight (S1) or crossed (S2) switches outside the
// array connects them to the two word lines, so a negative input is applied
// by swapping the two lines. Voltages are integers in DAC steps:
//   WL_OFF  -> V_GND
//   WL_HIGH -> V_HIGH (boosted above VDD + VTH for precharge and readout)
//   WL_DAC  -> Vin(+) = V_BASE + mag, Vin(-) = V_BASE, before the swap
// so the differential word-line voltage in the MAC phase is +-mag steps.
// With neither S1 nor S2 closed a word line is left at V_GND. Closing both
// would short the lines; an assertion flags it.
//
// The DAC, switch blocks and S1/S2 crossing follow the paper's figures; the
// tap values and the common level V_BASE are this model's own. The outputs
// follow the inputs with no delay.
module rstring_dac
  import macdo_pkg::*;
#(
  parameter int ROWS = macdo_pkg::N_ROWS
) (
  input  row_drive_t drive [ROWS],
  output int         wl_q  [ROWS],
  output int         wl_qn [ROWS]
);
  function automatic int level(wl_mode_e m, int tap);
    unique case (m)
      WL_HIGH: return V_HIGH;
      WL_DAC:  return tap;
      default: return V_GND;
    endcase
  endfunction

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      int p, n;
      p = level(drive[r].mode_p, V_BASE + int'(drive[r].mag));
      n = level(drive[r].mode_n, V_BASE);
      if (drive[r].s2 && !drive[r].s1) begin
        wl_q[r]  = n;
        wl_qn[r] = p;
      end else if (drive[r].s1 && !drive[r].s2) begin
        wl_q[r]  = p;
        wl_qn[r] = n;
      end else begin
        wl_q[r]  = V_GND;
        wl_qn[r] = V_GND;
      end
    end
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_chk
    always_comb assert (!(drive[r].s1 && drive[r].s2));
  end
endmodule
