// macdo_pkg: constants and types shared by the MAC-DO blocks.
//
// The array operates in the three cell phases (reset/precharge, MAC,
// standby) followed by a row-by-row readout. Word-line and bit-line levels of
// the analog parts are carried as integers: a word-line level is counted in
// DAC steps (one step = one input LSB), a cell voltage in "charge units" so
// that V_QN - V_Q after a MAC phase is exactly Vin x A_v in input-LSB x
// tail-capacitor units. The 16 x 16 array and 4-bit inputs and weights follow
// the test circuit; the level constants are this design's own scaling.
package macdo_pkg;

  // Array geometry and precisions of the test circuit.
  localparam int N_ROWS    = 16;
  localparam int N_COLS    = 16;
  localparam int IN_BITS   = 4;   // signed two's complement input
  localparam int W_BITS    = 4;   // signed two's complement weight
  localparam int ADC_RES   = 6;   // differential ADC resolution
  localparam int N_MAX_MACS = 200; // MAC operations per precharge

  // Tail switches per weight block: the offset weight W + 2^(N-1) spans
  // 0..2^N-1 and the chopped weight -W + 2^(N-1) spans 1..2^N.
  localparam int NUM_TAIL  = 2 ** W_BITS;

  // Word-line levels in DAC steps.
  localparam int V_GND     = 0;    // word line off (standby, unselected)
  localparam int V_BASE    = 16;   // R-string tap for a zero input
  localparam int V_HIGH    = 255;  // boosted word line (> VDD + VTH)
  // Precharged cell voltage in charge units.
  localparam int VDD_Q     = 1 << 20;

  // Operating phase of the array.
  typedef enum logic [2:0] {
    PH_IDLE,       // nothing driven, word lines low
    PH_PRECHARGE,  // phase 1: PREC, M1, M2 on; tail capacitors reset
    PH_MAC,        // phase 2: Vin on the word lines, CK on
    PH_STANDBY,    // phase 3: word lines low, tail capacitors reset
    PH_READ_Q,     // readout: WL of V_Q of the selected row high, sample Ca
    PH_READ_QN,    // readout: WL of V_QN of the selected row high, sample Cb
    PH_CONVERT     // readout: ADC converts Cb - Ca
  } phase_e;

  // What a row controller asks of one word line.
  typedef enum logic [1:0] {
    WL_OFF,   // grounded
    WL_HIGH,  // boosted high
    WL_DAC    // driven from the R-string DAC
  } wl_mode_e;

  // Per-row command from the row controller to the DAC and switch blocks.
  typedef struct packed {
    wl_mode_e             mode_p;  // word line of V_Q  (Vin(+))
    wl_mode_e             mode_n;  // word line of V_QN (Vin(-))
    logic [IN_BITS-1:0]   mag;     // input magnitude 0 .. 2^(IN_BITS-1)
    logic                 s1;      // straight polarity switches
    logic                 s2;      // crossed polarity switches
  } row_drive_t;

  // Per-column command from the column controller to a weight block.
  typedef struct packed {
    logic [NUM_TAIL-1:0]  tail_en; // tail switch enables (thermometer)
    logic                 ck;      // connects tail node to the bit line
    logic                 ck_b;    // resets the tail node (RESET switch)
    logic                 prec;    // bit-line precharge switch
  } col_drive_t;

  // Offsets of the behavioural array model (not of the logic): the
  // input-referred mismatch I_m of cell (r, c), spread over -spread..spread,
  // and the parasitic tail capacitance W_o of column c in tail-capacitor units.
  function automatic int model_im(int r, int c, int spread);
    return ((r * 3 + c * 5) % (2 * spread + 1)) - spread;
  endfunction
  function automatic int model_wo(int c, int wo);
    return wo + (c % 2);
  endfunction

endpackage
