# Nonlinear in-memory ADC macro and LSTM accelerator

An LSTM layer needs a matrix-vector product and then a nonlinearity on each
output: a sigmoid for three of the four gates and a tanh for the fourth. An
analog compute-in-memory (CIM) array does the product cheaply on its bitlines.
In a conventional design, though, every column still needs an ADC, and after
that a digital unit for the activation. This design does the activation inside
the ADC, with no extra hardware.

The ADC is a single-slope (ramp) converter, built from extra rows of the same
SRAM array. The ramp does not rise in equal steps. Its step sizes come from a
programmed table shaped like the derivative of the inverse activation. The
counter that records where the ramp crosses the bitline voltage therefore
reads f(MAC) directly. Changing the table changes the activation: sigmoid,
tanh, ELU, softplus, or a plain linear ADC.

This repository holds SystemVerilog for:
- the macro: a 190 x 100 array of dual 9T SRAM cells, the row pulse
  generators, the ADC sequencer, 100 sense amplifiers and 100 counters;
- the digital parts around it that run one LSTM layer for 12-keyword spotting
  (40 MFCC features, 38 hidden units), with a fully connected layer and an
  argmax behind it.

The analog array is a cycle-based behavioural model in integer units. All the
rest is synthesizable RTL.

## 1. The ternary bitcell array (`cim_array`)

### Bitcells and products

Each cell has two 6T halves. Together they store a ternary weight:

| weight | (Q_L, Q_R) |
|---|---|
| +1 | (H, L) |
| 0 | (L, L) |
| -1 | (L, H) |

Each cell also has two read stacks, one to each of the bitlines RBLL and RBLR.

Each row has two word lines:
- A positive input raises **+RWL**.
- A negative input raises **-RWL**.
- The input magnitude is the pulse length in clock cycles, produced by `pwm_generator`.

While a pulse is high, the cell discharges one bitline by one unit per cycle:

| product input x weight | effect |
|---|---|
| +1 | RBLL discharges |
| -1 | RBLR discharges |
| 0 | nothing |

The column result is therefore

    V_MAC = V_RBLR - V_RBLL = sum_i In_i * W_i     (units of I_u*T/C_BL)

The model keeps each bitline as an integer discharge count:
- Precharge (`pch`) resets both counts.
- The outputs `v_rbll` / `v_rblr` give the voltage above the bottom of the swing.
- The usable swing is 190 units (700 mV at about 3.68 mV per unit). A bitline
  that would discharge further clips there. The top-level test drives columns
  into that clip on purpose.

### Row map

| rows | use | supply | discharge per cycle |
|---|---|---|---|
| 0..79 | MAC | V_MSB | `nbwr` units |
| 80..156 | MAC | V_LSB | 1 unit |
| 157..159 | MAC, or calibration when `cal_en` at 5-bit resolution | V_LSB | 1 unit |
| 160..189 | ADC reference cells (160+20..189 calibrate at 4 bits or fewer) | V_LSB | 1 unit |

### Multi-bit weights

A multi-bit weight is split across one row on the higher supply and one on the
lower supply. The supply difference (about 30 mV) makes a V_MSB cell draw
`n_BWR` times the current of a V_LSB cell. A 3-bit weight in {-3..3} is stored
as an MSB ternary digit in rows 0..79 plus an LSB ternary digit in rows 80..,
with `nbwr = 2`. Both rows receive the same input.

5-bit weights use four cells and `nbwr = 4`. Two of the cells get doubled pulse
lengths. The array and the `nbwr` input support this. At 5-bit row inputs,
though, the doubled pulses only work for inputs |x| <= 7, because a pulse is
at most 15 cycles.

`nbwr` is an ideal integer here. On silicon it is set by a PTAT-based supply
generator and a calibrated resistor. Its spread (about 2.01 ± 0.08) is not
modelled.

### Outside the model

- **Write port:** one row of 100 weights per cycle (`wr_en`, `wr_row`, `wr_data`).
  This is a simple choice of this design; the actual SRAM write path is not part
  of the model.
- **Per-column offset** (`OFFSET_MAX`, default 0): an optional seeded offset
  added at precharge. It imitates the ramp offset that device mismatch causes,
  so the calibration rows have something to cancel.

## 2. The nonlinear ramp ADC (`nlim_adc_controller`)

### Deriving the step table

Take an n-bit activation f, here a sigmoid. Sample its inverse, f^-1, at 2^n - 1
equidistant output levels t_k, giving voltages V_k = f^-1(t_k). The gaps
dV_k = V_(k+1) - V_k are divided by the smallest gap and rounded. This gives
2^n - 2 integer step sizes Qnt(dV_k), the programmed table `q_tab`:

- 5-bit sigmoid:
  `6 4 3 2 2 2 1 1 1 1 1 1 1 1 1 1 1 1 1 1 1 1 1 1 2 2 2 3 4 6`
  (30 entries, sum 56)
- 4-bit sigmoid: `3 2 1 1 1 1 1 1 1 1 1 1 2 3` (14 entries, sum 20)

Tanh has the same tables, because it is a scaled sigmoid.

### One conversion

Start to `done` is `3 + L_MAC + L_RAMP` cycles. The conversion runs in this order:

1. **PCH** (1 cycle).
   - Bitlines are precharged.
   - Counters are cleared.
   - The 160 row PWM generators are started.
2. **MAC / initial ramp / calibration** (`L_MAC` cycles). Three things run at
   the same time:
   - *Input pulses.* They build V_MAC.
   - *Initial ramp.* The reference cells of the first 2^(n-1) - 1 steps get
     **-RWL** pulses, with the same widths they will later get as steps. This
     discharges RBLR and lowers the difference to about minus half the total
     ramp. That lets the ADC read signed MAC values.
   - *Calibration* (`cal_en`). Device mismatch shifts each column's ramp a
     little, so per-column calibration weights shift the starting point back:
     - At 5 bits, rows 157..159 get +RWL pulses of 4, 2 and 1 cycles. Their
       stored weights shift the start by -7..+7 units.
     - At 4 bits or fewer, the ramp needs at most 20 reference cells. The 10
       spare cells (reference rows 20..29) each get a one-cycle +RWL pulse
       instead, shifting the start by -10..+10 units. Rows 157..159 then
       remain MAC rows, so all 160 rows are available.

     A host finds these weights with a zero-crossing search: with no input,
     the code at MAC = 0 should sit at mid-scale.

   `L_MAC` is at least 15 cycles, the longest 5-bit input pulse. In PWM mode it
   is longer if an initial-ramp step is longer.
3. **RAMP** (`L_RAMP` cycles). Step k adds Qnt(dV_k) units to V_RBLR - V_RBLL by
   raising **+RWL** on reference cells, which discharges RBLL. There are two
   ways to make a step:
   - **PWM mode:** one reference cell per step (step k uses reference row k-1),
     pulsed for Qnt(dV_k) cycles. This is cheap in cells; the latency is the
     table sum. `L_RAMP = sum(q)`, where a zero entry costs one idle cycle.
   - **MCL (multi-cell) mode:** Qnt(dV_k) cells pulsed together for one cycle.
     The cells are taken in row order. This takes 2^n - 2 cycles, but the table
     sum must fit in the 30 reference rows, or in 20 when the spare cells
     calibrate. If it does not, the controller raises `cfg_err`; the
     conversion still runs, but its codes mean nothing.
4. **Final compare** (1 cycle), then **DONE**: a one-cycle `done` pulse.

### Turning comparisons into a code

The sense amplifiers are strobed:
- once at the end of the MAC phase (the first cycle of step 1);
- in the first cycle of every following step;
- once more after the last step.

That makes 2^n - 1 comparisons. A column's counter increments on each strobe
at which V_RBLR > V_RBLL, that is, while MAC + ramp is still above zero. The
code 0..2^n-1 is the number of ramp levels that the MAC value exceeds, which is
f(MAC) quantised. A tie reads as 0.

For the 5-bit sigmoid in PWM mode, a conversion takes 3 + 15 + 56 = 74 cycles.

Before use, the host must write weight +1 into the reference cells (rows
160..189) of every column. All steps share one ramp for all 100 columns.
Resolution `res` can be set from 1 to 5 bits.

## 3. The macro (`nlim_cim_macro`)

The macro wires together:
- 160 `pwm_generator`s, one per MAC row;
- the controller;
- the array;
- one `sense_amp` and one counter (`ripple_counter`) per column.

It is one clock domain. Its host interface:
- configuration inputs (`mode`, `res`, `cal_en`, `nbwr`, `q_tab`), held stable
  during a conversion;
- `in_load` with 160 signed 5-bit row inputs;
- the weight write port;
- `start` / `busy` / `done`;
- 100 five-bit `code`s, valid from `done` until the next `start`.

The counter is called a ripple counter after its role: it turns the sense
amplifiers' thermometer sequence into a binary count. It is written as a
synchronous saturating counter with an enable.

## 4. The LSTM around the macro (`lstm_pe`, `lstm_pe_array`, `lstm_accelerator`)

One time step computes

    [f a i o] = [sigm tanh sigm sigm]( W x_t + U h_{t-1} )    -> macro
    c_t = f*c_{t-1} + i*a,   h_t = o*tanh(c_t)               -> PE array

### Mapping onto the array

- x_t (40 features) drives rows 0..39.
- h_{t-1} (38 units) drives rows 40..77.
- For 3-bit weights, the LSB copies of the same rows sit 80 rows further down
  (`h_dup` also feeds h_t there).
- Each gate of each hidden unit is one column, and its ADC table is that gate's
  activation. That is 4 x 38 = 152 columns.

The macro has only 100 columns, so the top runs a time step as two macro
operations:
1. The f and a columns: 76 columns, sigmoid table on the f columns.
2. The i and o columns.

The weights are rewritten between the two. One table serves all four gates:
tanh(x) = 2*sigm(2x) - 1, so the tanh gate uses the sigmoid steps. The factor 2
on its input is absorbed into that gate's weights, and the PE reads its code as
2*sigm - 1. After each operation the host copies a range of column codes into the
**gate buffer**: 152 five-bit slots, slot = 38*g + unit, with gate order f, a,
i, o. This buffering and the host-driven sequencing are this design's own. The
row and column budget is shown in the table at the end.

### PE number formats

These formats are this design's own.

| quantity | format |
|---|---|
| gate code c of an r-bit ADC | read as the bin centre (2c+1)/2^(r+1): unsigned, 6 fraction bits |
| tanh gate a | 2*that - 1 |
| cell state c_t | signed 16 bit, 10 fraction bits, saturating |
| tanh LUT | 64 entries over [0, 4) in steps of 1/16; entry j = min(255, round(256 * tanh((2j+1)/32))); built at elaboration by an integer series, no data file; odd symmetry for negative c |
| h_t | round(15*h), a signed 5-bit value that goes straight back into the PWM generators |

### The PE pipeline

`lstm_pe` has four stages:
1. f*c_{t-1} and i*a
2. add, and store c_t
3. tanh by look-up table
4. o*tanh, then requantise

It accepts one hidden unit per cycle, and each unit's result leaves 4 cycles
later.

`lstm_pe_array` has 19 PEs, each owning 2 of the 38 units. Unit 0 of every PE
enters with `start`, and unit 1 enters the next cycle. The whole h_t is
therefore ready 5 cycles after `start` (`done`). Cell states stay in the PEs
between time steps; `pe_clr` clears them at the start of an utterance.

### The classifier (`fc_argmax`)

After the last time step, `fc_argmax` applies the 38 x 12 fully connected layer
to h_t and takes the argmax:
- weights are signed 8-bit, with no bias;
- it evaluates one class per cycle;
- on a tie, the lower class index wins;
- the result arrives 13 cycles after `fc_start`.

Its width and schedule are simple choices, not taken from a described circuit.

## 5. Where this departs from, or goes beyond, the described chip

- **Array values.** Bitline voltages are ideal integers. Leakage,
  current-source mismatch, temperature, and the RWL underdrive that makes the
  cell current constant are not modelled; the clip at 190 units stands in for
  the end of the linear range.
- **MSB/LSB boundary.** The MSB/LSB supply split is taken at row 80, as in the
  text ("upper 80 rows"). The array floor plan shows the LSB copy of input 0 on
  row 78 and of input 77 on row 155, a split at 78. With the 80-row offset used
  here, the LSB copy of hidden unit 37 falls on row 157, the first calibration
  row. So 3-bit-weight time steps at 5-bit resolution must run with `cal_en`
  low. At 4 bits, calibration moves to the spare reference cells and row 157
  is free; the top-level test runs both cases.
- **Spare-cell calibration pulses.** For 4-bit calibration on the 10 spare
  reference cells, the one-cycle pulse on each cell is this design's choice.
- **Cycle-level ADC timing.** The ramp table sums to the stated conversion
  latency (56 cycles for the 5-bit sigmoid). On top of that, this design adds
  one final comparison cycle plus its precharge and done cycles.
- **Initial ramp.** In PWM mode, the initial ramp uses the widths of the first
  2^(n-1)-1 table entries; this equals half the full ramp for symmetric tables.
  For asymmetric activations (ELU, softplus), the starting point is therefore
  minus the first half of the table, not minus half the table sum.
- **Table entries** are 7 bits wide (at most 127 cycles per step). This is
  enough for all six activations evaluated (largest total: 96 cycles for the
  5-bit softsign).
- **Outside the RTL.** The PTAT supply generator, the bitline precharge
  devices, the RWL drivers, the MFCC front end, and the calibration search
  procedures are analog, off-chip, or host work.

## 6. What fits

| workload | needs | built | fits? |
|---|---|---|---|
| LSTM layer, 2-bit (ternary) weights | 78 rows x 152 columns | 157 rows (160 at 4 bits or without calibration) x 100 columns | rows fit; columns need 2 operations per step, with a weight rewrite |
| LSTM layer, 3-bit weights | 156 rows x 152 columns | as above | 2 operations per step; calibration only at 4-bit resolution (see above) |
| Sigmoid / tanh / ELU / SELU / softplus, 4-bit, MCL mode | 20 / 20 / 14 / 14 / 23 reference cells | 30 reference cells, 20 while the spare cells calibrate | yes; softplus only without calibration |
| Softsign, 4-bit, MCL mode | 42 reference cells | 30 reference cells | no; PWM mode only |
| Any of the six, 5-bit, PWM mode | one cell per step | 30 reference cells | yes |
| FC 38 x 12 | 456 weights | 12 x 38 registers | yes |

## 7. Simulating

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog if it
hangs. With Verilator 5, from the repository root:

    verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb +libext+.sv \
        --top-module tb_lstm_accelerator rtl/nlim_pkg.sv tb/tb_lstm_accelerator.sv
    ./obj_dir/Vtb_lstm_accelerator

To run another testbench, replace the name. The package must come first on the
command line; `-y rtl` lets Verilator find the other modules by name.

| testbench | what it covers |
|---|---|
| `tb_pwm_generator`, `tb_ripple_counter`, `tb_sense_amp` | the small blocks, exhaustively or nearly so |
| `tb_cim_array` | random weights and pulses against a reference discharge count, `n_BWR`, clipping, offsets |
| `tb_nlim_adc_controller` | the exact word-line and strobe sequence for both modes, several resolutions and tables, and the MCL cell-budget flag |
| `tb_nlim_cim_macro` | full conversions checked against a reference code (count of ramp levels below the MAC value) and against the latency formula, with calibration and sigmoid/tanh/linear tables |
| `tb_lstm_pe`, `tb_lstm_pe_array` | h_t against a real-valued LSTM update within one output step, the 4- and 5-cycle latencies |
| `tb_fc_argmax` | scores, ties, and the 13-cycle latency |
| `tb_lstm_accelerator` | the full-size design through several LSTM time steps and a classification |

`tb_lstm_accelerator` runs the full-size design: a random network, ternary and
3-bit weights, PWM and MCL ramps at 5 and 4 bits, both calibration schemes, h feedback,
clipping, and a final classification. It checks every macro code, every h_t
and the latencies. It also counts each mechanism and fails if one never
occurred.

To try a different activation, change the `q_tab` values the testbench
programs. The table rule in section 2 gives them from any monotone activation.
