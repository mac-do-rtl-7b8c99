// weight_block: behavioural model of the tail capacitor bank of one column.
//
// This is a model of an analog part, not logic to synthesize. The bank is
// NUM_TAIL tail capacitors, each behind a tail switch (1T1C structure), on a
// tail node that the CK switch joins to the column's bit line and the RESET
// (CK-bar) switch grounds. During a MAC phase (CK on) the charge the cells of
// the column can pass to the tail is set by the enabled capacitance, so the
// model reports it as `tail_units` = enabled switches + W_o, the parasitic
// capacitance of bit line and bank in the same units. A capacitor that was
// not emptied since its last MAC phase (RESET and its tail switch on in a
// precharge or standby phase) is already charged and takes no further charge;
// the model keeps that per capacitor. Outside the MAC phase tail_units is 0.
//
// The structure follows the paper; the integer units, one capacitor unit per
// switch and the integer parasitic W_o are this model's own.
// Timing: tail_units follows ck/tail_en at once; the charged state of each
// capacitor changes on the rising clock edge that ends a phase.
module weight_block
  import macdo_pkg::*;
#(
  parameter int WO = 1
) (
  input  logic       clk,
  input  col_drive_t drive,
  output int         tail_units
);
  logic [NUM_TAIL-1:0] charged;

  always_comb begin
    tail_units = 0;
    if (drive.ck) begin
      tail_units = WO;
      for (int t = 0; t < NUM_TAIL; t++)
        if (drive.tail_en[t] && !charged[t]) tail_units += 1;
    end
  end

  always_ff @(posedge clk) begin
    for (int t = 0; t < NUM_TAIL; t++) begin
      if (drive.ck_b && drive.tail_en[t]) charged[t] <= 1'b0;
      else if (drive.ck && drive.tail_en[t]) charged[t] <= 1'b1;
    end
  end
endmodule
