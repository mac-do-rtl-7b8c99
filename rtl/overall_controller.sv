// overall_controller: sequences one output-stationary array operation.
//
// One operation computes a ROWS x COLS tile of A x B as K outer products
// (K = num_k, the length C x R x R of the shared dimension). The sequence is
//   1. precharge   cells to VDD, tail capacitors reset (held until the first
//                  input and weight vectors are both available)
//   2. MAC         one outer product I_k x W_k into every cell
//   3. standby     results held, tail capacitors reset; the next vectors are
//                  taken here, and the phase is stretched while a buffer is
//                  empty (a stall)
//   repeat 2-3 K times, then for every row r = 0 .. ROWS-1:
//   4. read V_Q    V_Q word line of row r high, sample-and-hold on Ca
//   5. read V_QN   V_QN word line of row r high, sample-and-hold on Cb
//   6. convert     start the ADCs, wait for them and for room in the output
//                  buffer, then push the row of codes
// With `chop` set (analog correction) every vector pair is applied twice,
// the second time negated, so 2K MAC phases run.
//
// A cell may accumulate at most MAX_MACS results after one precharge; a
// request for more (or for K = 0) is refused with `err` and nothing starts.
//
// The three cell phases, the MAC/standby alternation without re-precharge,
// the row-wise readout and the chopping repetition follow the paper. One
// phase per clock cycle (so one MAC every two cycles, the MAC and standby
// halves of the paper's CK period), stretching precharge/standby while data is
// missing, and the refusal on overflow are this design's choices.
//
// Timing: `start` is taken in idle. `in_pop`/`w_pop` pulse in the cycle the
// vectors are latched into `cur_in`/`cur_w`, which the row and column
// controllers use during the following MAC phase. `acc_en` pulses once per
// vector pair (not for the repeated, negated MAC). `done` pulses with the push
// of the last row.
module overall_controller
  import macdo_pkg::*;
#(
  parameter int ROWS     = macdo_pkg::N_ROWS,
  parameter int COLS     = macdo_pkg::N_COLS,
  parameter int MAX_MACS = macdo_pkg::N_MAX_MACS
) (
  input  logic                               clk,
  input  logic                               rst,
  // command
  input  logic                               start,
  input  logic [7:0]                         num_k,
  input  logic                               chop,
  output logic                               busy,
  output logic                               done,
  output logic                               err,
  // input and weight buffers
  input  logic                               in_valid,
  input  logic signed [ROWS-1:0][IN_BITS-1:0] in_data,
  output logic                               in_pop,
  input  logic                               w_valid,
  input  logic signed [COLS-1:0][W_BITS-1:0] w_data,
  output logic                               w_pop,
  // to row and column controllers
  output phase_e                             phase,
  output logic [$clog2(ROWS)-1:0]            read_row,
  output logic                               negate,
  output logic signed [ROWS-1:0][IN_BITS-1:0] cur_in,
  output logic signed [COLS-1:0][W_BITS-1:0] cur_w,
  // to S/H and ADC
  output logic                               sample_a,
  output logic                               sample_b,
  output logic                               adc_start,
  input  logic                               adc_valid,
  // to output buffers
  input  logic                               out_ready,
  output logic                               out_push,
  // to digital correction
  output logic                               acc_clear,
  output logic                               acc_en,
  output logic                               chop_mode,
  // event counters for observation
  output logic [15:0]                        stall_cycles
);
  phase_e     state;
  logic [7:0] k_cnt, k_total;
  logic       conv_started;

  wire have_data = in_valid && w_valid;
  wire last_row  = (read_row == ($clog2(ROWS))'(ROWS - 1));
  wire [8:0] macs_needed = chop ? {num_k, 1'b0} : {1'b0, num_k};

  assign phase     = state;
  assign busy      = (state != PH_IDLE);
  assign sample_a  = (state == PH_READ_Q);
  assign sample_b  = (state == PH_READ_QN);
  assign adc_start = (state == PH_CONVERT) && !conv_started;
  assign out_push  = (state == PH_CONVERT) && conv_started && adc_valid && out_ready;
  assign done      = out_push && last_row;

  // Take the next vector pair in precharge, or in standby when another is due.
  logic take;
  always_comb begin
    take = 1'b0;
    if (state == PH_PRECHARGE && have_data) take = 1'b1;
    if (state == PH_STANDBY && !(chop_mode && !negate) &&
        (k_cnt != k_total) && have_data) take = 1'b1;
  end
  assign in_pop = take;
  assign w_pop  = take;
  assign acc_en = take;

  always_ff @(posedge clk) begin
    if (rst) begin
      state        <= PH_IDLE;
      k_cnt        <= '0;
      k_total      <= '0;
      read_row     <= '0;
      negate       <= 1'b0;
      chop_mode    <= 1'b0;
      conv_started <= 1'b0;
      err          <= 1'b0;
      acc_clear    <= 1'b0;
      cur_in       <= '0;
      cur_w        <= '0;
      stall_cycles <= '0;
    end else begin
      acc_clear <= 1'b0;
      if (take) begin
        cur_in <= in_data;
        cur_w  <= w_data;
        k_cnt  <= k_cnt + 1'b1;
      end
      unique case (state)
        PH_IDLE: if (start) begin
          if (num_k == 0 || macs_needed > 9'(MAX_MACS)) begin
            err <= 1'b1;
          end else begin
            err       <= 1'b0;
            k_total   <= num_k;
            k_cnt     <= '0;
            chop_mode <= chop;
            negate    <= 1'b0;
            acc_clear <= 1'b1;
            state     <= PH_PRECHARGE;
          end
        end
        PH_PRECHARGE: begin
          if (take) state <= PH_MAC;
          else      stall_cycles <= stall_cycles + 1'b1;
        end
        PH_MAC: state <= PH_STANDBY;
        PH_STANDBY: begin
          if (chop_mode && !negate) begin
            negate <= 1'b1;            // repeat the same pair, negated
            state  <= PH_MAC;
          end else if (k_cnt == k_total) begin
            negate   <= 1'b0;
            read_row <= '0;
            state    <= PH_READ_Q;
          end else if (take) begin
            negate <= 1'b0;
            state  <= PH_MAC;
          end else begin
            stall_cycles <= stall_cycles + 1'b1;
          end
        end
        PH_READ_Q:  state <= PH_READ_QN;
        PH_READ_QN: begin
          conv_started <= 1'b0;
          state        <= PH_CONVERT;
        end
        PH_CONVERT: begin
          conv_started <= 1'b1;
          if (out_push) begin
            if (last_row) begin
              state <= PH_IDLE;
            end else begin
              read_row <= read_row + 1'b1;
              state    <= PH_READ_Q;
            end
          end
        end
        default: state <= PH_IDLE;
      endcase
    end
  end

  // A vector pair is only taken while both buffers deliver one.
  assert property (@(posedge clk) disable iff (rst) take |-> have_data);
  // The MAC phase is always followed by standby.
  assert property (@(posedge clk) disable iff (rst) (state == PH_MAC) |=> (state == PH_STANDBY));
endmodule
