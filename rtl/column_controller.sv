// column_controller: tail-switch, CK, RESET and PREC control of every column.
//
// A weight sets the gain of all MAC-DO cells on its bit line by choosing how
// many tail capacitors of the column's weight block take part in the MAC
// phase. Because the charge-steering cell can only discharge, a signed weight
// W is shifted by 2^(N-1) before it reaches the array (N = W_BITS), so the
// code W + 2^(N-1) runs 0 .. 2^N-1; in chopping mode the weight is negated,
// giving 2^(N-1) - W in 1 .. 2^N. The code is thermometer-decoded into
// NUM_TAIL = 2^N tail-switch enables.
//
// Per phase:
//   precharge  PREC on (bit line to VDD), CK off, RESET (CK-bar) and all tail
//              switches on so every tail capacitor is emptied
//   MAC        PREC off, RESET off, CK on, tail switches = thermometer code
//   standby    CK off, RESET and all tail switches on again
//   readout    like standby; the tail bank stays isolated from the bit line
//
// The offset 2^(N-1), the thermometer decoding and the phase behaviour follow
// the paper. Sizing the bank at 2^N switches so that the chopped weight
// -W + 2^(N-1) is representable is this design's choice (the paper gives no
// count). Outputs are combinational in `phase`, `negate` and `w_vec`.
module column_controller
  import macdo_pkg::*;
#(
  parameter int COLS = macdo_pkg::N_COLS
) (
  input  phase_e                             phase,
  input  logic                               negate,
  input  logic signed [COLS-1:0][W_BITS-1:0] w_vec,
  output col_drive_t                         drive [COLS],
  output logic [COLS-1:0][W_BITS:0]          code
);
  localparam int OFFSET = 2 ** (W_BITS - 1);

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      logic signed [W_BITS+1:0] w, k;
      w = (W_BITS+2)'($signed(w_vec[c]));
      k = negate ? (W_BITS+2)'(OFFSET) - w : w + (W_BITS+2)'(OFFSET);
      code[c] = k[W_BITS:0];

      drive[c].prec    = 1'b0;
      drive[c].ck      = 1'b0;
      drive[c].ck_b    = 1'b1;
      drive[c].tail_en = '1;
      unique case (phase)
        PH_PRECHARGE: drive[c].prec = 1'b1;
        PH_MAC: begin
          drive[c].ck   = 1'b1;
          drive[c].ck_b = 1'b0;
          for (int t = 0; t < NUM_TAIL; t++)
            drive[c].tail_en[t] = (t < int'(code[c]));
        end
        default: ;
      endcase
    end
  end
endmodule
