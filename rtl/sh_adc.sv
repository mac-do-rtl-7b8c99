// sh_adc: behavioural model of the per-column sample-and-hold and
// differential ADCs.
//
// This is a model of an analog part, not logic to synthesize. Each column has
// two sampling capacitors: Ca takes the bit line while the V_Q word line of
// the row being read is HIGH (sample_a), Cb while its V_QN word line is HIGH
// (sample_b). Ca feeds the ADC's negative input and Cb the positive one, so
// `start` converts Cb - Ca = V_QN - V_Q, the cell's MAC result. The code is
// the difference divided by 2^ADC_SHIFT, rounded toward minus infinity and
// clipped to the signed ADC_BITS range. `valid` rises CONV_CYCLES clock
// cycles after `start` and stays high, with the codes, until the next start.
//
// One ADC per column, the S/H sequence and the 6-bit resolution follow the
// paper; the full-scale choice (ADC_SHIFT), rounding and conversion time are
// this model's own.
module sh_adc
  import macdo_pkg::*;
#(
  parameter int COLS        = macdo_pkg::N_COLS,
  parameter int ADC_BITS    = macdo_pkg::ADC_RES,
  parameter int ADC_SHIFT   = 7,
  parameter int CONV_CYCLES = 2
) (
  input  logic                                 clk,
  input  logic                                 rst,
  input  int                                   bl [COLS],
  input  logic                                 sample_a,
  input  logic                                 sample_b,
  input  logic                                 start,
  output logic                                 valid,
  output logic signed [COLS-1:0][ADC_BITS-1:0] code
);
  localparam int CMAX = 2 ** (ADC_BITS - 1) - 1;
  localparam int CMIN = -(2 ** (ADC_BITS - 1));

  int ca [COLS];
  int cb [COLS];
  int busy_cnt;

  function automatic logic [ADC_BITS-1:0] quantize(int diff);
    int q;
    q = diff >>> ADC_SHIFT;
    if (q > CMAX) q = CMAX;
    if (q < CMIN) q = CMIN;
    return ADC_BITS'(q);
  endfunction

  always_ff @(posedge clk) begin
    for (int c = 0; c < COLS; c++) begin
      if (sample_a) ca[c] <= bl[c];
      if (sample_b) cb[c] <= bl[c];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      valid    <= 1'b0;
      busy_cnt <= 0;
      code     <= '0;
    end else if (start) begin
      valid    <= 1'b0;
      busy_cnt <= CONV_CYCLES;
    end else if (busy_cnt > 0) begin
      busy_cnt <= busy_cnt - 1;
      if (busy_cnt == 1) begin
        valid <= 1'b1;
        for (int c = 0; c < COLS; c++) code[c] <= quantize(cb[c] - ca[c]);
      end
    end
  end
endmodule
