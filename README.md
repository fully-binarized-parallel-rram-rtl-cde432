# Binarized in-memory similarity search on a 2T-2R RRAM XOR array

This design finds, among a set of stored binary vectors, the one nearest to
a binary query in Hamming distance. All stored vectors are compared with the
query at once, inside the memory array. Each stored bit uses two resistive
RAM (RRAM) devices in the same column, a "2T-2R" cell. Applying a query bit
to that cell selects one of the two devices. A matching bit selects a
high-resistance device, so almost no current flows. A mismatching bit
selects a low-resistance device, which conducts a few microamps. The
bit line of a column adds the currents of all its cells. So the column
current rises with the number of mismatches, which is the Hamming distance.
A sense amplifier per column turns the current into a voltage. The column
with the lowest voltage holds the nearest vector.

The RTL here has three parts:

- synthesizable control and decode logic;
- behavioural models of the analog parts (the RRAM array and the sense
  amplifiers);
- a small digital back end that picks the nearest column and labels the
  query.

The main configuration is an 8x8 1T-1R array. It is used as 4 XOR rows by
8 columns, so it holds eight 4-bit vectors. The clock is 50 MHz. Everything
is parameterised, and larger arrays (160 x 32, 128 x 32) are simulated in
the testbenches.

## Bipolar values and the differential cell

Vectors are bipolar: each element is '+1' or '-1'. In the RTL, logic 1
means '+1' and logic 0 means '-1'.

XOR row `i` uses two consecutive 1T-1R rows of a column. The top device is
row `2i` and the bottom device is row `2i+1`.

| stored value | top device | bottom device |
|---|---|---|
| '-1' (0) | LRS (low resistance) | HRS (high resistance) |
| '+1' (1) | HRS | LRS |

A query bit is applied as a pair of word lines, so no negative voltage is
needed:

| query value | WL top | WL bottom |
|---|---|---|
| '-1' (0) | 0 | 1 |
| '+1' (1) | 1 | 0 |

Take a stored '+1' (top HRS, bottom LRS). A query of '+1' turns on the top
device, which is HRS, so the cell draws little current: a match. A query of
'-1' turns on the bottom device, which is LRS, so the cell draws a large
current: a mismatch. The same holds for a stored '-1'. Each cell therefore
computes `query XOR stored`, and the bit line sums the XORs. Storing every
bit in two devices also makes the cell more tolerant of programming errors
and device spread than storing it in one.

## Currents, voltages and the distance scale

The array model gives every selected device a fixed read current at the
0.2 V read bias:

- LRS: 6000 nA (measured mismatch currents average at least 6 uA);
- HRS: 1000 nA (measured match currents average under 1 uA).

A column of `N` XOR rows at Hamming distance `HD` therefore carries

    I_BL = HD * 6000 nA + (N - HD) * 1000 nA

The sense amplifier's gain is set for the column length. A full match gives
about 0 V and a full mismatch about the 1.8 V supply:

    V_out = 1800 mV * (I_BL - N*1000) / (N*5000)   (clamped to 0..1800)

With nominal currents this is exactly `1800 * HD / N`. For the 4-row array
the levels are 0, 450, 900, 1350 and 1800 mV. The model reports `V_out` as
an integer number of millivolts so the digital back end can compare
columns. In silicon this needs a comparator or ADC, which is this design's
addition.

Optional device-to-device spread (`VAR_PCT`): each device gets its own
current when it is programmed, within +-VAR_PCT percent of nominal. It is
drawn from an LFSR in the model. This lets you watch when spread starts to
reorder near-equal columns.

## Programming

A device is written one at a time by selecting its word line and its
column's BL/SL pair:

| pulse | result | WL | SL | BL | length |
|---|---|---|---|---|---|
| SET | LRS | 1.8 V | 1.4 V | 0 V | 1 us = 50 cycles |
| RESET | HRS | 4.5 V | 0 V | 1.2 V | 1 us = 50 cycles |
| read (search) | – | 1.4 V | 0.2 V | 0 V | 20 ns = 1 cycle |

The controller programs a column in a fixed order. It starts with the top
device of row 0, then its bottom device, then row 1, and so on. Each pulse is
followed by one idle cycle. A column of `N` rows takes `2N*(50+1)+1` cycles,
which is 409 cycles (8.2 us) for 4 rows. The column's class label is then
written and the column is marked valid.

The array model switches a device only at the end of a pulse that lasted the
full pulse length. It has no other notion of time. The voltages are not
modelled. The controller's operation code (`arr_op`) and the matching
voltage set point (`arr_bias`, a struct of WL/SL/BL millivolts) come out of
the top for the analog drivers, which are not part of this RTL.

## Search and the nearest-match back end

A search drives the query on the word-line pairs of all columns for one
20 ns read pulse. In that cycle the back end captures the `V_out` of every
column. It then makes `K` passes. Each pass takes the valid column with the
lowest `V_out` that has not been picked yet, with ties going to the lower
index, and gives one vote to that column's label.

The result contains:

- the first pick (the nearest column) and its `V_out`;
- the label with the most votes, which is the mode of the `K` nearest;
- on a vote tie, the label that reached the count first.

With `K = 1`, the default, the label is that of the nearest column. A column
that was never programmed has both devices in HRS, so it would read as a
perfect match. The valid bit keeps it out of every search.

Timing, counted in clock edges from the edge that accepts the command:

- a search result (`res_valid`) comes `1 + K` edges later, which is 2 by
  default;
- the next command is accepted two edges after that;
- a program command keeps `cmd_ready` low for 409 edges.

## Query front end: thermometer code

Hamming distance gives every bit the same weight. Ordinary binary numbers
do not, so features are first converted to a thermometer code. For a uint8
feature `v`, bit `i` is `v > 31 + 32*i`, for `i` = 0..7. Because the top
threshold is 255 and no byte exceeds it, bit 7 is always 0. The rule is
kept as published anyway.

With `cmd_thermo` set, the top encodes `ceil(N_ROWS/8)` feature bytes and
uses the first `N_ROWS` code bits as the vector. The same path serves stored
vectors and queries. With 160 rows, a pixel described by 20 features fits
exactly (20 x 8 bits). With the default 4 rows, only the four lowest levels
of one feature fit.

The floating-point steps that produce those feature bytes are not in this
RTL: a PCA projection, sign-log scaling, two normalisations and rounding to
uint8. They need trained constants.

## Block map

| file | kind | what it does |
|---|---|---|
| `rtl/imss_pkg.sv` | package | op and command enums, bias struct and table, pulse widths, currents |
| `rtl/thermometer_encoder.sv` | RTL | uint8 -> 8-bit thermometer code |
| `rtl/imss_controller.sv` | RTL | command handshake, SET/RESET pulse sequencing, read pulse |
| `rtl/wl_decoder.sv` | RTL | differential WL pairs for search, one-hot row for programming |
| `rtl/col_select.sv` | RTL | all columns for search, one-hot column for programming |
| `rtl/rram_xor_array.sv` | behavioural model | device states, pulse-driven switching, bit-line current sums |
| `rtl/sense_amp.sv` | behavioural model | current-to-voltage transfer, gain set by column length |
| `rtl/nearest_match.sv` | RTL | label/valid store, arg-min passes, top-K vote |
| `rtl/imss_top.sv` | RTL | wires the above together |

Top parameters: `N_ROWS` (XOR rows, default 4), `N_COLS` (8), `K` (1),
`N_CLASSES` (16), `SET_CYCLES`/`RESET_CYCLES` (50), `READ_CYCLES` (1) and
`VAR_PCT` (0).

## Where this design departs from, or adds to, the published scheme

- **Device currents.** The array model uses fixed device currents, the
  measured averages, instead of resistance distributions. Two sources give
  different resistance ranges: the text gives 3–20 kOhm (LRS) and
  110 kOhm–1 MOhm (HRS), and the measured distributions show 10–25 kOhm and
  150 kOhm–1 MOhm. Neither is used directly.
- **Sense amplifier.** The amplifier is a straight line between the
  full-match and full-mismatch points. The real two-stage amplifier's
  transfer curve is not reproduced.
- **Pulse widths.** SET and RESET pulses are both 1 us. One published table
  lists a 2 us RESET pulse; set `RESET_CYCLES = 100` for that. A search uses
  the 20 ns read pulse. A 50 us read pulse is only used to characterise
  single devices and is not implemented.
- **Own choices.** These parts are this design's own:
  - the valid/ready command interface, the pulse order and the idle gap;
  - the per-column valid bit;
  - digital `V_out` codes;
  - the hardware nearest-match and vote logic (done in software in the
    original work);
  - the power-up state (all devices HRS).
- **Not implemented.** There is no program-verify. There are no per-device
  read commands. Forming (the first set of a fresh device) is not modelled.
- **Not built.** The analog WL/SL/BL drivers and the feature-extraction
  pipeline are not built.

## Simulating

All testbenches are self-checking and print
`TB_RESULT checks=<n> failures=<m>`. With Verilator 5:

    verilator --binary --timing --assert --timescale 1ns/1ps \
      --top-module tb_imss_top -Irtl -y rtl -y tb +libext+.sv \
      rtl/imss_pkg.sv tb/tb_imss_top.sv -o sim && ./obj_dir/sim

Substitute any testbench name:

| testbench | what it checks |
|---|---|
| `tb_thermometer_encoder` | all 256 inputs |
| `tb_wl_decoder`, `tb_col_select` | every operation, query and address |
| `tb_rram_xor_array` | programming with real-length pulses; all 16 queries on 8 columns; shorter pulses must not switch |
| `tb_sense_amp` | the five nominal levels and random currents, including clamping |
| `tb_nearest_match` | K = 1 and K = 3 against a sorting reference, with result latency |
| `tb_imss_controller` | pulse kind, order and length for random vectors; read pulse; handshake |
| `tb_imss_top` | the default-size engine end to end (see below) |
| `tb_imss_workloads` | larger engines (see below); about 20 s |

`tb_imss_top` drives the default-size engine end to end. It programs
columns, reprograms one, searches every 4-bit query in raw and thermometer
form, and checks every result, every column voltage and both latencies. It
also counts that each mechanism happened at least once:

- SET and RESET pulses;
- searches and exact matches;
- thermometer-coded commands;
- skipping of the empty column;
- a command stalled by `cmd_ready`.

`tb_imss_workloads` runs two larger engines, both with synthetic data and
full-length pulses:

- A 160-row x 32-column engine with 16 classes and a top-3 vote. It runs
  once with nominal device currents and once with +-20 % device spread.
- A 128 x 32 engine, the size used for energy comparisons of such arrays.

The full training set of a real hyperspectral classification task needs
tens of thousands of 160-bit columns. That is far beyond the 8-column
default, but only a matter of `N_COLS`. The model keeps two 32-bit numbers
per device, so the simulator's memory, not the logic, sets the practical
limit.
