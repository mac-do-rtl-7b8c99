// row_controller: word-line and polarity control for every row of the array.
//
// Each array row owns two word lines, the one of its V_Q cells (Vin(+)) and
// the one of its V_QN cells (Vin(-)). Per phase the row controller asks the
// R-string DAC and switch blocks for:
//   precharge  both word lines boosted HIGH, so M1/M2 pass VDD into the cells
//   MAC        both word lines from the DAC; the magnitude |I| of the row's
//              signed input sets the differential level, and the sign selects
//              the straight (S1) or crossed (S2) polarity switches
//   standby    both word lines off, the result stays on the cell capacitors
//   read V_Q   only the V_Q word line of the selected row HIGH
//   read V_QN  only the V_QN word line of the selected row HIGH
// In chopping mode (analog offset cancellation) `negate` flips the polarity
// of every row, which applies -I without touching the magnitude.
//
// The phase behaviour, the S1/S2 sign switching and the one-row-at-a-time
// readout follow the paper. The two's complement input format (so |I| runs
// 0..2^(IN_BITS-1)) and the fact that this block is purely combinational
// (the overall controller holds the current input vector) are this design's
// choices. Timing: outputs follow `phase`, `read_row`, `in_vec` and `negate`
// combinationally within the same clock cycle.
module row_controller
  import macdo_pkg::*;
#(
  parameter int ROWS = macdo_pkg::N_ROWS
) (
  input  phase_e                              phase,
  input  logic [$clog2(ROWS)-1:0]             read_row,
  input  logic                                negate,
  input  logic signed [ROWS-1:0][IN_BITS-1:0] in_vec,
  output row_drive_t                          drive [ROWS]
);
  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      logic signed [IN_BITS-1:0] x;
      logic                      neg;
      logic [IN_BITS-1:0]        mag;
      x   = in_vec[r];
      neg = x[IN_BITS-1];
      // |x| fits in IN_BITS bits as an unsigned number, -2^(N-1) included.
      mag = neg ? IN_BITS'(-x) : IN_BITS'(x);

      drive[r].mode_p = WL_OFF;
      drive[r].mode_n = WL_OFF;
      drive[r].mag    = '0;
      drive[r].s1     = 1'b1;
      drive[r].s2     = 1'b0;
      unique case (phase)
        PH_PRECHARGE: begin
          drive[r].mode_p = WL_HIGH;
          drive[r].mode_n = WL_HIGH;
        end
        PH_MAC: begin
          drive[r].mode_p = WL_DAC;
          drive[r].mode_n = WL_DAC;
          drive[r].mag    = mag;
          drive[r].s1     = ~(neg ^ negate);
          drive[r].s2     =  (neg ^ negate);
        end
        PH_READ_Q:  if (read_row == r[$clog2(ROWS)-1:0]) drive[r].mode_p = WL_HIGH;
        PH_READ_QN: if (read_row == r[$clog2(ROWS)-1:0]) drive[r].mode_n = WL_HIGH;
        default: ;
      endcase
    end
  end
endmodule
