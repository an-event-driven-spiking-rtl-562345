# Event-driven spiking compute-in-memory macro on SOT-MRAM

This macro computes a matrix-vector product inside a 128 x 128 array of
spin-orbit-torque MRAM cells. Its inputs and outputs are the time between two
spikes, not voltages or binary words. An analog in-memory multiply usually
needs a DAC on every row and an ADC on every column, and those converters use
most of the energy. Here they are replaced by a few gates and one capacitor
comparison per column:

* An input value is the interval between two spikes on a row wire.
* The row applies a fixed read voltage to its cells for exactly that interval.
  Each cell therefore passes a charge proportional to input x conductance.
* Each column collects the charge of all its cells on a capacitor.
* Once every input has finished, each column sends its sum back out as the
  interval between two output spikes.

No clock runs during a computation. The single control signal, `Event_flag`,
is made from the input spikes themselves.

The SystemVerilog here models the whole macro. The digital parts are
synthesizable RTL. The analog parts (the MRAM cells, the clamps, the current
mirror, the capacitors and the comparator) are event-driven behavioural models
using `real`. They are exact to the simulator's time resolution.

## 1. The computation in one equation

Row *i* receives a spike pair with interval `T_in,i`. Cell (*i*, *j*) has
conductance `G_ij`. After the operation, column *j* emits a spike pair with
interval

```
T_out,j = alpha * sum_i  T_in,i * G_ij ,    alpha = k * V_read * C_com / (C_rt * I_com)
```

The parts of alpha:

* `V_read` = 0.1 V is the voltage across an active cell.
* `k` is the current-mirror ratio.
* `C_rt` is the result capacitor and `C_com` the reference capacitor. Both are
  200 fF.
* `I_com` is the current that charges the reference capacitor.

With the default values, alpha = 2e4 per siemens: 1e-12 s*S of weighted input
gives a 20 ns output interval. The relation is linear by construction. The
column charge is a sum of current x time, and the output interval is set by a
constant-current ramp.

A note on the formula. Charge balance (`V = Q / C` on both capacitors) gives
`C_com / C_rt` as written above. Some write-ups of this circuit give the
inverse ratio. The two agree when the capacitors are equal, as they are here.

Inputs in the testbenches are 8-bit numbers coded at 0.2 ns per LSB, so an
input spans 0 to 51 ns. The macro itself accepts any interval.

## 2. Data path of one operation

```
 spike_in[i] ──► spike_modulation_unit[i] ──v_in[i]──► crossbar_read ──i_bl[j]──► output_spike_generator[j] ──► spike_out[j]
                     │ Event_flag_i                       ▲  ▲                        ▲        │ v_rbl1[j]
                     ▼                                    │  └────────────────────────┼────────┘
                 ctrl_unit ── Event_flag, Event_flag_n ───┼───────────────────────────┘
                                                          │ state
 clk,we,wr_row ─► row_decoder_wl_driver ─ wwl ─► mram_array
 wr_col,wr_data ► col_decoder_write_driver ─ col_sel, col_data ─┘
```

Timing of one operation, for two rows as an example:

```
spike_in[1]   ___|_______________|________________________________________
spike_in[2]   _|______|_________________________________________________
Event_flag_1  ___/‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾\________________________________________
Event_flag_2  _/‾‾‾‾‾‾\__________________________________________________
Event_flag    _/‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾\________________________________________
V_charge      _/‾slope = k*I_bl/C_rt, I_bl changes at every event edge‾ (then held)
V_com         ___________________/ constant slope I_com/C_com ──► crosses V_charge
spike_out[j]  ___________________|____________________|_______________________
                                 ◄──────── T_out ─────►
```

1. **Reset.** A pulse on `reset` clears every row flip-flop and empties both
   capacitors of every column. Give one before each operation.
2. **Row events.** The first spike on row *i* raises `Event_flag_i` and the
   second lowers it. While the flag is high, the row line is pulled from
   V_clamp (0.4 V) to V_in,clamp (0.3 V). Each cell of the row then carries
   `0.1 V * G`. The column lines are held at 0.4 V, so an idle row has no
   voltage across its cells and draws no current. Rows may start and stop in
   any order and may overlap.
3. **Integration.** `Event_flag` is the OR of all row flags. While it is high,
   each column's clamp/mirror copies the column current (scaled by k) onto
   `C_rt`.
4. **Readout.** When the last row event ends, `Event_flag` falls and two things
   happen. First, the rising edge of `Event_flag_n` fires the first output
   spike on every column. Second, each column's reference capacitor starts
   charging at `I_com`. When its voltage reaches `V_charge`, the comparator
   output rises and fires the second spike.

All columns share the first output spike. Only the second one depends on the
data.

## 3. The 3T-2MTJ cell and its four conductances

Each cell holds two MTJs in series on a shared heavy-metal write path. For a
write, the three access transistors conduct. For a read, they are off and the
cell is simply `R_J1 + R_J2` between the row line (RBL[0]) and the column line
(RBL[1]). J2 is built with twice the resistance of J1. With a 1 MOhm
low-resistance state and 100 % TMR, that gives four distinct series values:

| code (J2 J1) | R_J1 | R_J2 | R_cell | G_cell |
|---|---|---|---|---|
| 00 | 2 MOhm | 4 MOhm | 6 MOhm | 0.167 uS |
| 01 | 1 MOhm | 4 MOhm | 5 MOhm | 0.200 uS |
| 10 | 2 MOhm | 2 MOhm | 4 MOhm | 0.250 uS |
| 11 | 1 MOhm | 2 MOhm | 3 MOhm | 0.333 uS |

Bit 0 sets J1, bit 1 sets J2, and 1 means the low-resistance state. With this
assignment the conductance rises with the code. The weights are not
equally spaced in conductance: the macro multiplies by G, not by the code.
Any mapping from trained weights to codes must take that into account.

## 4. The event flag: control without a clock

The row flip-flop is a D flip-flop whose D input is its own output through an
inverter, and whose clock is the input spike line. Each spike toggles it. This
one flop is all it takes to turn a spike pair into a pulse as long as the
interval. The OR of all row flags (`ctrl_unit`) gives one global flag. That
flag is high exactly while any input is still being applied, so:

* its high time gates the result capacitors;
* its falling edge starts the readout.

Because of this, an operation takes as long as its longest input plus the
longest output interval. Nothing waits for a fixed time window.

Consequences a user must respect:

* Every active row must receive **exactly two** spikes per operation. A third
  spike would leave its flag high and the readout would never start.
* A row with input 0 gets **no** spikes. Two spikes at the same instant cannot
  be sent on one wire.
* `reset` is asynchronous and clears the flags, so never pulse it during an
  operation.

## 5. Output spike generator: how the interval is measured

The output spike generator is where most of the modelling choices are, so this
section says exactly what the model does.

* **`vc_cm`, the clamp and current mirror.** It drives the column line
  (`v_rbl1`) to 0.4 V and integrates `k * i_bl` into `C_rt` while
  `Event_flag` is high. The integral is evaluated at events. On every change
  of the column current, of the flag or of reset, it adds `current x elapsed
  time` for the interval just ended. The current is piecewise constant (it
  changes only at row-event edges), so the result is exact. `v_charge` is
  updated only at those events: between them it shows the value of the last
  event, not the rising ramp. After `Event_flag` falls, it holds the final
  value.
* **`comparator_block`, the reference ramp and comparator.** It stays idle
  while `Event_flag` is high and after reset. At the falling edge of
  `Event_flag` it records the start time and schedules the crossing at
  `V_charge * C_com / I_com` later. If `v_charge` changes after that (the
  integrator updates in the same instant as the flag edge), the crossing is
  rescheduled. A sequence number cancels stale crossings. The output stays
  high until the next rising `Event_flag` or reset.
* **`spike_generator`.** Its output is the input AND-ed with a delayed,
  inverted copy of itself, so each rising edge gives one pulse as wide as the
  delay (50 ps here). The column output is the OR of the two generators: one
  is triggered by `Event_flag_n`, the other by the comparator.

**Resolution limit.** If `T_out` is shorter than about two spike widths
(100 ps, i.e. a weighted sum below 5e-15 s*S), the two output pulses overlap
and leave as one wider pulse. One row with a small input is such a case: one
LSB on a 6 MOhm cell gives T_out = 0.7 ps. The linearity testbench checks that
small results behave this way and leaves them out of the line fit. A longer
unit interval, a smaller `I_com` or a narrower spike widens the usable range.

The model is ideal. It has no comparator offset or delay, no mirror error, no
leakage and no saturation at the 1.1 V supply. With k = 1 and every one of
128 rows at full scale on 3 MOhm cells, `V_charge` reaches 1.09 V. A real
implementation would pick k or the capacitors to stay within the supply
headroom.

## 6. Parameters

Package `cim_pkg` holds the shared values. Modules take them as typed
parameters.

| name | value | origin |
|---|---|---|
| `N_ROWS`, `N_COLS` | 128, 128 | published array size (32 Kb at 2 bits/cell) |
| `R_LRS`, `TMR`, `J2_RATIO` | 1 MOhm, 100 %, 2 | published device values |
| `V_IN_CLAMP`, `V_CLAMP` | 0.3 V, 0.4 V | published; V_read = 0.1 V |
| `C_RT`, `C_COM` | 200 fF, 200 fF | published |
| `K_MIRROR` | 1 | own choice (not published) |
| `I_COM` | 5 uA | own choice, set to give about 20 ns per 1e-12 s*S, the scale of the published transfer curve |
| `SPIKE_PW_PS` | 50 ps | own choice (inverter delay of a spike generator) |
| `T_BIT_PS` | 200 ps | published input coding: 0.2 ns per LSB (testbenches only) |

All time is in picoseconds. Every file sets `` `timescale 1ps/1fs ``, and the
analog models use SI units internally (`cim_pkg::PS` converts between the two).

## 7. Writing weights

The write path is synchronous to `clk` and writes one cell per cycle. Set
`we`, `wr_row`, `wr_col` and `wr_data` before a rising `clk` edge, and the cell
takes the new code at that edge. The components:

* `row_decoder_wl_driver` makes one-hot word lines. One line per row stands
  for both write word lines of the row and the source-line transistor, since
  all three transistors conduct in a write.
* `col_decoder_write_driver` selects the column and drives the two data bits.
* `mram_array` holds the state. MTJs are non-volatile, so the array has no
  reset.

The direction and length of the SOT write current are not modelled. Do not
write during an operation: the analog read sees the new state immediately.
The top module asserts this rule in simulation.

## 8. Module map

| module | kind | what it is |
|---|---|---|
| `spiking_cim_macro` | top (structural) | wires everything below |
| `spike_modulation_unit` | behavioural wrapper | one row: `smu_event_dff` + `smu_input_clamp` |
| `smu_event_dff` | RTL | toggle flip-flop clocked by the spike line |
| `smu_input_clamp` | behavioural | row voltage from the flag |
| `ctrl_unit` | RTL | OR of the row flags, and its complement |
| `row_decoder_wl_driver` | RTL | write row decoder |
| `col_decoder_write_driver` | RTL | write column decoder and data driver |
| `mram_array` | RTL | 128 x 128 x 2-bit cell state |
| `crossbar_read` | behavioural | Ohm + Kirchhoff over 128 x 128 `sot_cell_3t2mtj` |
| `sot_cell_3t2mtj` | behavioural | series J1 + J2 conductance |
| `output_spike_generator` | behavioural wrapper | one column: `vc_cm` + `comparator_block` + 2 x `spike_generator` |
| `vc_cm` | behavioural | column clamp, mirror, C_rt integration |
| `comparator_block` | behavioural | C_com ramp and comparator |
| `spike_generator` | behavioural | edge-to-pulse (AND with delayed inverse) |
| `cim_pkg` | package | constants, `weight_t` |

Synthesis can take only the RTL modules. In silicon the behavioural ones are
transistor circuits. `spike_generator` is a gate circuit too, but its pulse
width comes from a delay that synthesis would remove.

## 9. Where this model departs from, or adds to, the published design

* **Published:** the block structure, the toggle flip-flop with its inverter,
  the OR of the row flags, the inverter-and-AND spike generator, the two
  trigger points of the output spikes, the series two-MTJ cell with its 2:1
  resistance ratio, and all the voltages, capacitors and device values in
  section 6.
* **Not published, chosen here:**
  * k, I_com and the spike width;
  * the bit-to-MTJ assignment;
  * rising-edge clocking and the active-high reset that clears the flag;
  * discharging C_rt and C_com by the same reset;
  * merging the two output spikes onto one wire with an OR;
  * a binary-addressed, clocked, one-cell-per-cycle write port.
* **Not modelled:** transistor-level behaviour of the clamps and mirror, the
  nonlinear charging without the mirror (only a comparison case), energy and
  power, device variation, noise.
* **The Ctrl Unit** is described only by the signals it passes on. It is built
  here as the flag OR gate plus the complement that the readout needs.

## 10. Simulating

Every testbench prints `TB_RESULT checks=N failures=M`, then ends.

```
verilator --binary --timing --assert -y rtl -y tb rtl/cim_pkg.sv tb/tb_spiking_cim_macro.sv --top-module tb_spiking_cim_macro
./obj_dir/Vtb_spiking_cim_macro
```

The same command works for any testbench: replace the file and top name.
`--timing` is required, because the analog models and the spike generators use
delays.

* `tb_spiking_cim_macro` runs the full 128 x 128 macro:
  * writes all 16,384 cells with random codes;
  * runs five operations: random inputs on all rows, half the rows idle, one
    row at full scale, all rows at full scale, and random inputs after one
    column has been rewritten;
  * checks that all 128 columns have two spikes;
  * checks that the first spike comes when the last input event ends;
  * checks that `T_out` is within 2 ps of the formula above, which the
    testbench computes from the resistances independently of the RTL;
  * counts how often each mechanism occurred.

  The 16,384 cell instances make the build take about 3-4 minutes. The run
  takes seconds.
* `tb_linearity_sweep` runs 24 operations on 128 rows x 8 columns, with 8-bit
  inputs and 2-bit weights drawn uniformly and 1 to 128 active rows. It fits a
  line through (weighted sum, T_out) and checks three things: the slope is
  alpha within 1e-4, the intercept is within 2 ps of zero, and no point is
  more than 2 ps off the line.
* `tb_<module>` tests each module on its own against expected values worked out
  in the testbench.

To change the design:

* Array size: `N_ROWS` and `N_COLS` on `spiking_cim_macro`.
* Circuit values: `cim_pkg`, or override the parameters of `vc_cm`,
  `comparator_block` and `spike_generator`.

If you change a circuit value, the testbenches' expected-value formulas will
follow only where they read `cim_pkg`. The unit testbenches use literal
published values on purpose, so that they check the package as well.
