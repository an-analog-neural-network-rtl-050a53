# A charge-trap-transistor analog engine for fully-connected layers

This RTL describes an engine that computes one fully-connected neural-network
layer, `Y_j = sum_i X_i * W_ij`, inside a 784 x 784 crossbar of charge-trap
transistors (CTTs). A CTT is a standard NMOS transistor. Its threshold voltage
can be shifted, in a non-volatile way, by trapping charge in the high-k gate
dielectric with a counted train of gate pulses. That shift is the stored
weight. In the triode region the transistor's current is roughly proportional
to `V_DS * (V_GS - V_T)`, so each cell multiplies its drain voltage by its
weight. A row resistor sums the currents of all cells in a row, which gives
one analog dot product per row.

Three ideas shape the digital side:

* **Bit-serial input, no DAC.** Input values are never turned into analog
  voltages. The *sequential analog fabric* (SAF) presents the 8-bit inputs one
  bit plane at a time. Each bit closes or opens a switch between one fixed
  drain voltage (from a tunable LDO) and that input's column of drains. Eight
  bit planes give eight partial dot products per row. The digital side weights
  them by `2^b` and adds them up.
* **One ADC for all rows.** An analog multiplexer (AMUX) puts one row at a
  time on a single 8-bit SAR ADC. So the mixed-signal hardware stays the same
  whatever the array size.
* **The host keeps everything else.** Weights, inputs and inter-layer results
  live on a host PC and pass over a UART. The chip stores only the programmed
  array. A multi-layer network runs as a sequence of runs, and the host applies
  the activation function between them.

The array, LDO, AMUX, ADC and comparator are analog. They appear here as
behavioural models, so the whole engine can be simulated. The controllers,
pulse generators, SAF registers, accumulator and calibration are
synthesizable RTL.

## Block map

```
 host ==UART==> uart_ctrl --ldo code--> ldo_model --V_DS--------------+
                  |  |  |                                             |
                  |  |  +--inputs--> saf --drain_on[M]--> ctt_array_model --row_level[N]--> amux_model
                  |  |                ^                      ^                                  |
                  |  +--column-->  pulse_gen_ctrl --load--> counted_pulse_gen x N --pulses--+   |
                  |                                      (DDMUX folded into the array model)    |
                  |                                                                             v
                  +<--results-- offset_calib <-- seq_accumulator <--code-- sar_adc_model (comparator_model x 8)
                                       ^               ^                     ^
                                       +--------- engine_ctrl (run sequencer) +
```

| File | Kind | Role |
|---|---|---|
| `ctt_pkg.sv` | package | sizes, `analog_t`, polarity/mode enums, host command codes |
| `ctt_engine_top.sv` | RTL + models | the whole engine |
| `uart_ctrl.sv`, `uart_rx.sv`, `uart_tx.sv` | RTL | host link and command decoder |
| `pulse_gen_ctrl.sv` | RTL | one-column count buffer, starts the pulse generators |
| `counted_pulse_gen.sv` | RTL | one per row: emits N gate pulses of one polarity |
| `saf.sv` | RTL | input registers, parallel-to-serial bit planes, input sum |
| `engine_ctrl.sv` | RTL | run sequencer: bit planes x rows, ADC starts, calibration |
| `seq_accumulator.sv` | RTL | `acc[row] += code << bit` |
| `offset_calib.sv` | RTL | learns and removes the input-dependent offset |
| `ctt_array_model.sv` | model | the CTT crossbar, including the DDMUX |
| `ldo_model.sv` | model | tunable drain-voltage source |
| `amux_model.sv` | model | row multiplexer |
| `sar_adc_model.sv`, `comparator_model.sv` | model | 8-bit SAR ADC |

## How analog values are carried

The models pass analog quantities as 32-bit unsigned integers (`analog_t`).
The LDO output is in millivolts: `(code + 1) * 10` mV for a 4-bit code. A
cell that the SAF switches on contributes `V_DS * (G_OFF + n)` to its row,
where `n` is the net number of trapping pulses the cell has received
(0..255) and `G_OFF = 16` is a constant conductance that every cell has at
zero weight. So a row level is

```
level(j, b) = V_DS * sum_i bit_b(X_i) * (G_OFF + n(j, i))
```

The ADC converts `min(255, floor(level * 256 / FULL_SCALE))`, with
`FULL_SCALE = 2^20` level units. These units and constants are modelling
choices. Change `G_OFF`, `ADC_FS` and the LDO step to fit a measured device.

## Programming the weights

A weight is a pulse count. Trapping (positive) pulses raise a cell's
threshold voltage, and de-trapping (negative) pulses lower it. Each row has
its own counted pulse generator, and the generators program one column at a
time, all rows in parallel. The host sends a column as `CMD_PROG_COL`,
followed by the column number, the polarity and N counts.
`pulse_gen_ctrl` copies the counts into the N generators, drives the column
select (the DDMUX input) and the polarity, and answers once every generator
is idle. A generator holds each pulse for `PULSE_HIGH` cycles and leaves
`PULSE_LOW` cycles between pulses. The defaults are 500 + 500 cycles, that is
1 us pulses at 500 MHz. So a column takes
`max(count) * (PULSE_HIGH + PULSE_LOW) + 4` cycles after its last byte, and
the whole array takes 784 times the longest column. Because the generators
keep their own copy of the counts, the one-column buffer is the only weight
storage on chip.

In the model, the DDMUX (which routes each row's high-voltage pulses to the
selected column) is part of `ctt_array_model`. Its control signals are top
ports: `ddmux_col_o`, `ddmux_pol_o` and `gate_pulse_o`.

## A compute run, cycle by cycle

`CMD_RUN mode` starts `engine_ctrl`:

1. `saf_load`: the SAF copies its 784 input bytes into shift registers and
   closes the switches of the bit-0 plane.
2. `SETTLE` (2) cycles pass. The array model re-evaluates at the clock edge
   after its inputs change.
3. Scan: for rows 0..N-1, one row per cycle, the AMUX selects the row and the
   ADC converts it. The code comes back the next cycle, tagged with its row
   and bit, and is written to the accumulator. The first plane overwrites the
   stored value; later planes add to it.
4. The SAF shifts to the next bit, and steps 2-3 repeat for all 8 planes.
5. In calibration mode the offset calibration then learns its slopes.

An inference run takes `8 * (SETTLE + N) + 3` cycles, which is 6,291 cycles
at N = 784. A calibration run adds `N * (DIV_W + 3) + 1` cycles, with
`DIV_W = 33`. The results then stream back as N signed 24-bit values.

## Offset calibration

Every switched-on cell conducts, even at weight 0. So every row result
carries an error that is proportional to the sum of the inputs, the `G_OFF`
term above. Because the inputs are known, this error can be removed
digitally. The calibration works as follows:

* The host loads a calibration input vector `Xc` and the results it expects
  for it (`CMD_LOAD_EXP`, N 16-bit values). Then it issues `CMD_RUN 1`.
* After the run, `offset_calib` computes for each row, by restoring division,
  `k_j = ((acc_j - expected_j) << 16) / sum(Xc)`. The result is signed and
  truncated toward zero. `k_j` is 0 if the sum is 0.
* Every later result is returned as
  `acc_j - ((k_j * sum(X)) >>> 16)`, saturated to 24 bits. `sum(X)` is kept
  up to date by the SAF as inputs are written.

This is a linear, per-row model of the offset. It cannot remove ADC
quantisation or clipping, and the testbenches show both. Before the first
calibration, results are returned uncorrected.

A second, separate correction sits in the ADC. Its comparator has a small
correction input that cancels the comparator's own offset. In the model this
is an additive trim, in level units, that the host writes with
`CMD_SET_TRIM`. The comparator's decision is
`vin - vdac + CMP_OFFSET + trim >= 0`. How the trim value is found, for
example by converting a known level, is left to the host.

## Host protocol

8N1 UART, `CLKS_PER_BIT` = 16 clock cycles per bit by default. For a PC
serial port, set it from the clock, e.g. 4340 for 115200 baud at 500 MHz.
After each command the host must wait for the answer: `0xA5` means done and
`0x5A` means unknown command.

| Command | Bytes after the command byte | Answer |
|---|---|---|
| `0x01` program column | col_hi, col_lo, polarity (0 trap, 1 de-trap), N counts | ACK after the last pulse |
| `0x02` set LDO | code (low 4 bits) | ACK |
| `0x03` load inputs | M bytes | ACK |
| `0x04` run | mode (0 inference, 1 calibration) | N x 3 result bytes (MSB first), then ACK |
| `0x05` load expected | N x 2 bytes (MSB first) | ACK |
| `0x06` set comparator trim | trim_hi, trim_lo (signed) | ACK |

## Parameters of `ctt_engine_top`

| Parameter | Default | Meaning |
|---|---|---|
| `M`, `N` | 784, 784 | inputs (columns) and outputs (rows) |
| `CLKS_PER_BIT` | 16 | UART bit time |
| `PULSE_HIGH`, `PULSE_LOW` | 500, 500 | gate pulse width and gap, in cycles |
| `G_OFF` | 16 | zero-weight cell conductance (model) |
| `ADC_FS` | 2^20 | ADC full scale in level units (model) |
| `CMP_OFFSET` | 0 | comparator input offset in level units (model) |

The data and ADC widths (8 bits) are in `ctt_pkg`.

## Departures from the published design

* **Throughput.** The published engine claims 76,832 MACs per clock, which
  means every row converted every cycle. Its block diagram, though, shows one
  ADC behind an analog multiplexer. This RTL follows the block diagram, so a
  784 x 784 layer takes 6,291 cycles, about 98 MACs per cycle. For the
  published rate, add one ADC and accumulator lane per row: `engine_ctrl`'s
  row loop would then collapse to one cycle per bit plane.
* **ADC.** The published ADC uses a sub-radix capacitor DAC with one extra,
  redundant conversion step. Its radix is not given. The model uses binary
  weights and eight decisions, all finished within one system clock.
* **Programming time.** The published design gives the programming time as
  784 times the longest pulse count, in clock cycles, i.e. one pulse per
  cycle. Here a pulse lasts `PULSE_HIGH + PULSE_LOW` cycles, because a
  usable CTT pulse is much longer than a 2 ns clock period. Setting both to 1
  gives a pulse every two cycles.
* **Weights are unsigned** pulse counts, from 0 to 255. Signed weights would
  need a differential pair of rows or an offset weight. Neither is part of
  this design.
* **Linear cells.** The model has no device non-linearity, no variation and
  no retention loss. The op-amp buffers are ideal.
* **Own choices:** the host command set, UART framing and rate, pulse gap,
  LSB-first bit order, settle time, result widths and the calibration
  algorithm. The published design states only what these parts do.

## Fitting networks

At its default size the engine holds one 784-input layer with up to 784
outputs. Smaller layers can share the array: they use different rows, and
each layer's inputs start at column 0. For example, a 784-300-100-10 network
needs rows 0-299 for the first layer (784 columns), rows 300-399 for the
second (columns 0-299) and rows 400-409 for the third (columns 0-99). That is
410 rows in all, run as three passes, with the host applying the activation
function between passes.

## Simulating

Every testbench in `tb/` checks itself and ends by printing
`TB_RESULT checks=N failures=F`. Each one also has a watchdog. Build any of
them with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/ctt_pkg.sv tb/tb_ctt_engine_top.sv \
          --top-module tb_ctt_engine_top -o sim && obj_dir/sim
```

* `tb_<block>.sv`: unit tests of each block against independently computed
  values. They cover pulse counts and widths, column programming time, bit
  order, ADC transfer and latency, accumulation, the division in the
  calibration, scan order and run length, and the command decoding.
* `tb_ctt_engine_top.sv`: the whole engine at 8 x 6, with a comparator
  offset of more than two ADC steps. The host model first trims that offset
  out. It then programs every column (trapping, then a de-trapping correction), tunes the LDO,
  calibrates, runs four inferences (one with the ADC clipping) and sends an
  unknown command. Every returned value is compared with a reference model
  that only knows the pulse counts sent (`tb/ctt_host_tasks.svh`).
* `tb_ctt_engine_mlp.sv`: a three-layer network (16-8-4-2, a scaled-down
  784-300-100-10) on one 16 x 16 array, with each layer on its own rows as
  described under "Fitting networks". The host model applies ReLU and a
  power-of-two rescale between layers, and every layer's results are
  checked.
* `tb_ctt_engine_full.sv`: one complete operation at the default 784 x 784
  size with default parameters. It programs four columns, then runs a
  calibration and an inference, and checks 1,568 results. The run takes
  about 1.8 M cycles, well under a minute of simulation time. Programming all
  784 columns over the UART would take about 100 M cycles.

The behavioural models loop over the whole array, so synthesis tools will not
handle `ctt_array_model` at full size. It is meant for simulation only.
