// macdo_cell: behavioural model of one MAC-DO cell (two 1T1C DRAM cells).
//
// This is a model of an analog part, not logic to synthesize. The cell is a
// charge-steering differential pair: access transistor M1 (gate = word line
// of V_Q) and M2 (gate = word line of V_QN) share the column's bit line as
// tail node, and the two cell capacitors C_D hold V_Q and V_QN.
//   precharge  PREC on and both word lines HIGH: V_Q = V_QN = VDD
//   MAC        both word lines at DAC levels and a tail capacitance on the bit
//              line: each side loses charge in proportion to its gate level,
//              so V_QN - V_Q grows by A_v x Vin, A_v set by the tail
//   standby    word lines low: V_Q and V_QN are held
// In the model's units the step is tail_units x (wl_q - wl_qn + IM), where IM
// is the cell's input-referred mismatch offset (I_m), so after K MACs
//   V_QN - V_Q = sum_k (I_k + I_m) x (W_k + W_c).
// The paper's A_v also carries a factor 2/(N x C_D) (N cells per column); it
// is a constant gain and is left out here. The cell cannot charge itself
// back up, so a voltage that would fall below zero stays at zero.
//
// `vq`/`vqn` are the stored voltages; the array puts them on the bit line
// when the corresponding word line is HIGH for readout. Everything changes on
// the rising clock edge that ends a phase.
module macdo_cell
  import macdo_pkg::*;
#(
  parameter int IM = 0
) (
  input  logic clk,
  input  int   wl_q,
  input  int   wl_qn,
  input  int   tail_units,
  input  logic prec,
  output int   vq,
  output int   vqn
);
  int vq_r;
  int vqn_r;

  wire mac_phase = (wl_q > V_GND) && (wl_q < V_HIGH) &&
                   (wl_qn > V_GND) && (wl_qn < V_HIGH) && (tail_units > 0);

  always_ff @(posedge clk) begin
    if (prec && wl_q == V_HIGH && wl_qn == V_HIGH) begin
      vq_r  <= VDD_Q;
      vqn_r <= VDD_Q;
    end else if (mac_phase) begin
      vq_r  <= (vq_r  > tail_units * (wl_q + IM)) ? vq_r  - tail_units * (wl_q + IM) : 0;
      vqn_r <= (vqn_r > tail_units * wl_qn)       ? vqn_r - tail_units * wl_qn       : 0;
    end
  end

  assign vq  = vq_r;
  assign vqn = vqn_r;
endmodule
