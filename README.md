# MAC-DO: output-stationary multiply-accumulate inside a DRAM array

MAC-DO computes matrix products for CNN layers inside an ordinary DRAM array.
Two neighbouring 1T1C DRAM cells that share a bit line are treated as one
compute cell. During a compute step their two access transistors act as a
charge-steering differential pair: the bit line is the tail node, and a bank of
switchable tail capacitors hangs on that bit line. The differential word-line
voltage carries an input I. The number of tail capacitors switched in carries a
weight W. Each step moves a charge proportional to I × W from one cell
capacitor to the other. The difference between the two stored voltages
therefore accumulates Σ I × W in place, across many steps, without the result
ever leaving the cell. The array is output stationary: every row receives one
input, every column one weight, and one step adds a full outer product to all
ROWS × COLS stored results.

This repository holds SystemVerilog for the 16 × 16 test circuit built around
that idea: 4-bit signed inputs and weights, 6-bit ADCs, and at most 200
accumulations per precharge. The controllers, buffers and digital correction
are synthesizable logic. The analog parts are behavioural models that compute
in integers: the cells, the tail capacitor banks, the R-string DAC and the
sample-and-hold ADCs. Together they form an end-to-end model of the circuit
that can be simulated cycle by cycle.

## The compute cell and its three phases

A cell holds two voltages, V_Q and V_QN, on its two cell capacitors. Its life
between two refreshes of the result is:

| Phase | Word lines | Bit line / tail bank | Effect |
|---|---|---|---|
| precharge | both boosted HIGH | PREC on (bit line at VDD); RESET and all tail switches on | V_Q = V_QN = VDD; tail capacitors emptied |
| MAC | DAC levels Vin(+), Vin(−) | PREC and RESET off; CK on; tail switches = thermometer code of the weight | V_QN − V_Q grows by A_v × Vin, with A_v set by the connected tail capacitance |
| standby | off | CK off; RESET and all tail switches on | result held, tail bank emptied for the next MAC |

MAC and standby alternate K times after a single precharge. Each MAC only
discharges, so the common level of V_Q and V_QN drifts down. The circuit has
headroom for 200 MACs. `overall_controller` refuses a longer operation with
`err`.

`macdo_cell` models one cell. A MAC step subtracts `tail_units × level` from
each side, where each side's level is its own word-line voltage. V_QN − V_Q
thus gains `tail_units × (Vin + I_m)`. I_m is the cell's input-referred
mismatch. `weight_block` supplies `tail_units`: the number of enabled, emptied
capacitors plus a parasitic constant W_o. A capacitor that was not emptied
since its last MAC takes no more charge, so skipping the RESET step is visible
in simulation.

## One array operation

An operation computes one 16 × 16 tile of A × B, where the shared dimension has
length K. `overall_controller` runs it:

1. **precharge**. This phase is held until the first input vector (a column of
   A, one value per row) and the first weight vector (a row of B, one value per
   column) are both in their buffers.
2. **MAC**. The row controller drives the held input vector onto the word lines
   through the DAC. The column controller switches in the tail capacitors for
   the held weight vector.
3. **standby**. The next vector pair is taken from the buffers here. If either
   buffer is empty, standby is stretched (a stall) and counted in
   `stall_cycles`.
4. Steps 2–3 repeat K times (2K with chopping, see below).
5. **readout**, for each row r in turn:
   - raise the V_Q word line of row r, so every bit line shows that row's V_Q,
     which is sampled on Ca;
   - raise the V_QN word line, which is sampled on Cb;
   - start the 16 column ADCs, which convert Cb − Ca;
   - push the 16 codes into the output buffer once there is room.

The clock runs one phase per cycle. One MAC therefore takes two cycles, the MAC
and standby halves of a CK period. The controller tests check this rate. With
the default ADC timing, a row takes about five cycles to read out.

`res_*` returns the corrected row sums in row order 0..15. `done` pulses with
the last row's push into the output buffer.

## Signed numbers: shifted weights and crossed word lines

A charge-steering pair can only subtract charge, and a capacitor count cannot
be negative. The two operands get their sign in different ways:

- **Weights.** The column controller adds 2^(N−1) = 8 to the 4-bit two's
  complement weight. The code 0..15 is thermometer-decoded into 16 tail-switch
  enables. The cell then computes with W + 8 + W_o. The added constant
  W_c = 8 + W_o is removed later (next section).
- **Inputs.** The DAC always produces the magnitude |I| (0..8) as Vin(+) above a
  common level, with Vin(−) at the common level. Each row has a straight switch
  pair S1 and a crossed pair S2 between the DAC and its two word lines. A
  negative input closes S2, which swaps the lines and so flips the sign of the
  differential voltage.

## Removing offsets: digital correction and chopping

After K MACs, what a cell actually holds is

    Σ OUT = Σ (I + I_m)(W + W_c) = Σ I·W + I_m·Σ W + W_c·Σ I + K·I_m·W_c

There are two ways to remove the extra terms.

**Digital correction.** This is the default mode. `digital_correction`
accumulates Σ I for every row and Σ W for every column as the vectors leave
the buffers; one adder per row and one per column is enough. For each ADC row
it computes

    Σ I·W = code·2^ADC_SHIFT − I_m·Σ W − W_c·Σ I − K·I_m·W_c

I_m (one per cell) and W_c (one per column) are calibration constants. A host
writes them through `cal_we/cal_addr/cal_data`:

- address r·16 + c holds I_m of cell (r, c);
- addresses 256..271 hold W_c of each column.

A host finds them from test operands of ones and zeros. With the registers at
their reset value of zero, the circuit returns each cell's raw value,
code·2^ADC_SHIFT. The host runs the four combinations I, W ∈ {0, 1} at a few
values of K. It then searches for the integer I_m of each cell and the shared
W_c of each column that reproduce every code. `tb_calibration` does exactly
this: twelve operations give a unique solution for all 256 cells. The
procedure runs on the host, not in the RTL.

**Chopping (analog correction).** Set `chop` with `start`. Every vector pair is
applied twice: first as (I, W), then as (−I, −W). The row controller flips
S1/S2 for the second application, and the column controller uses 8 − W instead
of W + 8. Each pair then adds exactly 2·(I·W + I_m·W_c), so the terms linear
in the offsets cancel in the analog domain. The correction reduces to

    Σ I·W = (code·2^ADC_SHIFT − 2·K·I_m·W_c) / 2

Chopping halves the usable K per precharge, to 100 pairs. In return it halves
the ADC quantization error relative to the result. The tail bank has 16
capacitors, one more than the 4-bit weight needs, so that the chopped code
8 − (−8) = 16 can be represented.

The published closed form for chopping writes the constant as Σ I_m·W_c inside
the halving. The pairwise identity it is derived from gives 2·K·I_m·W_c. This
RTL uses the latter and matches the bit-exact model in the testbenches.

## Integer model of the analog parts

Voltages are integers. A word-line level is counted in DAC steps, one step per
input LSB, so Vin = ±|I|. A cell voltage is counted in charge units, so V_QN −
V_Q equals Σ (I + I_m)(W + W_c) exactly. The physical gain of the paper's
equations is the constant factor 2/(N·C_D) and is left out. VDD_Q = 2^20 units
gives ample headroom for 200 MACs.

The ADC divides Cb − Ca by 2^ADC_SHIFT, with ADC_SHIFT = 7 by default. It
rounds toward −∞ and clips to −32..31. This full scale is a choice of this
design. It covers about ±4096 product units, enough for a few hundred random
4-bit products.

The model uses a fixed mismatch pattern:

- `macdo_pkg::model_im` gives I_m(r, c) = ((3r + 5c) mod (2·IM_SPREAD + 1)) − IM_SPREAD;
- `model_wo` gives W_o(c) = WO + (c mod 2).

Set `IM_SPREAD = 0` and `WO = 0` for ideal cells. The calibration values
written into `digital_correction` must match the pattern, as in the
testbenches.

The model does not include leakage, noise, non-linearity of the charge
steering, unequal tail capacitor sizes or the common-centroid duplication of
cells. Results are exact apart from ADC quantization and clipping. Trust it
for the sequencing, the sign handling and the correction arithmetic, not for
analog accuracy.

## Mapping a CNN layer onto the array

A convolution with C_in input channels, 5 × 5 filters and C_out output
channels becomes A × B:

- A has M rows, one per output pixel, and K = C_in·25 columns (im2col);
- B has K rows and N = C_out columns.

Array rows take output pixels, or images of a batch when a layer has one output
pixel. Array columns take output channels. The layer splits into
⌈M/16⌉ × ⌈N/16⌉ tiles. A tile whose K exceeds 200 (100 when chopped) is
accumulated in several operations, and the corrected partial sums are added
outside the circuit.

`tb_lenet_layers` does this for the LeNet-5 layers:

| Layer | M × N × K | Array operations | Note |
|---|---|---|---|
| C1 | 784 × 6 × 25 | 49 | 6 of 16 columns in use |
| C3 | 100 × 16 × 150 | 7 | 14 when chopped: 2 passes of ≤ 100 pairs |
| C3, 4 images | 400 × 16 × 150 | 25 | every cell in use: tiles run across image boundaries |
| C5 | 16 × 120 × 400 (16 images) | 16 | 2 passes of K = 200 per tile |
| FC1 | 16 × 84 × 120 | 6 | |
| FC2 | 16 × 10 × 84 | 1 | |

Data preparation, quantization, dequantization, batch normalization,
activations and pooling are not part of the circuit. A host does them.

## Blocks and files

| File | Kind | Role |
|---|---|---|
| `rtl/macdo_pkg.sv` | package | sizes, phase and drive types, level constants, model offset functions |
| `rtl/vec_fifo.sv` | logic | input, weight and output buffers (valid/ready FIFO) |
| `rtl/overall_controller.sv` | logic | phase sequencer, vector fetch, readout, chopping, overflow refusal |
| `rtl/row_controller.sv` | logic | word-line modes, DAC magnitude, S1/S2 per row |
| `rtl/column_controller.sv` | logic | weight offset and negation, thermometer decode, PREC/CK/RESET |
| `rtl/digital_correction.sv` | logic | Σ I and Σ W accumulators, calibration registers, offset removal |
| `rtl/rstring_dac.sv` | behavioural | R-string DAC, switch blocks, polarity switches |
| `rtl/weight_block.sv` | behavioural | tail capacitor bank of one column |
| `rtl/macdo_cell.sv` | behavioural | one two-transistor, two-capacitor compute cell |
| `rtl/macdo_array.sv` | behavioural | 16 × 16 cells, weight blocks, bit-line readout |
| `rtl/sh_adc.sv` | behavioural | Ca/Cb sample-and-hold and 6-bit differential ADC per column |
| `rtl/macdo_top.sv` | top | everything above, wired buffers → controllers → DAC/array → ADC → buffer → correction |

The behavioural models use `int` signals and are not meant for synthesis. A
synthesis run over the top still elaborates them; only the logic blocks are
meaningful there.

Each file opens with a comment giving its timing and interface. The comment
also separates what follows the published circuit from the choices made here.
The main choices made here are:

- buffer depths of 16, 16 and 4, with a valid/ready handshake;
- one phase per clock;
- stalls by stretching precharge or standby;
- refusal beyond 200 MACs;
- the calibration register port;
- the ADC full scale.

## Simulating

Every testbench is self-checking and prints `TB_RESULT checks=N failures=M`.
With Verilator 5, list the package first:

    verilator --binary --timing --assert -Wno-fatal -Irtl \
        rtl/macdo_pkg.sv rtl/vec_fifo.sv rtl/row_controller.sv \
        rtl/column_controller.sv rtl/overall_controller.sv \
        rtl/digital_correction.sv rtl/rstring_dac.sv rtl/weight_block.sv \
        rtl/macdo_cell.sv rtl/macdo_array.sv rtl/sh_adc.sv rtl/macdo_top.sv \
        tb/tb_macdo_top.sv --top-module tb_macdo_top -Mdir obj_top
    obj_top/Vtb_macdo_top

For a unit testbench, replace the testbench file and the top module name. Only
the package and the unit's own file are needed, plus its submodules for
`macdo_array`.

| Testbench | What it checks |
|---|---|
| `tb_macdo_top` | Whole circuit at default size. Operations of K = 1, 16, 25, 150 and 200, chopped operations, random stalls and result back-pressure, ADC clipping, refusal of K = 201. Every result is bit-exact against an independent model, and within one ADC step of the true A × B. It counts each mechanism and fails if one never occurred. |
| `tb_lenet_layers` | Full LeNet-5 C1, C3 (also chopped), C5, FC1 and FC2 layers with random 4-bit data, compared with direct convolution. |
| `tb_calibration` | Offset calibration from 0/1 test data through the top's ports, then a calibrated random operation. |
| `tb_overall_controller` | Phase sequence, two cycles per MAC, stalls, chopping, refusals, readout order. |
| `tb_digital_correction` | Both correction formulas against exact sums. |
| `tb_row_controller`, `tb_column_controller` | Every phase, sign, negation and thermometer code. |
| `tb_rstring_dac`, `tb_weight_block`, `tb_macdo_cell`, `tb_macdo_array`, `tb_sh_adc` | The analog models. |
| `tb_vec_fifo` | Ordering, full/empty handshakes, simultaneous push and pop. |

Each testbench finishes in seconds.

To change the array size, override `ROWS`/`COLS` on `macdo_top`. The testbenches
assume 16 × 16 and the default offsets.

## Departures from the published circuit

- The analog behaviour is idealized and linear, as described above. The real
  test circuit's ADC full scale, tail capacitor sizes (6.8–9.6 fF) and DAC tap
  voltages are not reproduced.
- Signals such as PREC and the CK/RESET switch drives carry a logical "switch
  on" meaning; their electrical polarity is left to the drivers.
- In the chopping correction, the constant term follows the pairwise identity
  rather than the closed form that was printed (see above).
- Splitting K above 200 into several operations, and adding their results,
  is left to the host.
- The scaled-up configuration discussed for a real DRAM mat is not built or
  simulated: 256 × 512 compute cells, 512 ADCs.
