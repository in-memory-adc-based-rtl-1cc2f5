# SRAM in-memory computing macro with an in-memory nonlinear ADC

In an analog in-memory-computing (IMC) array the ADCs that digitise the column
results dominate area, energy and latency. Low-resolution ADCs help. But a
uniform 3- or 4-bit ADC wastes most of its levels, because neural-network
activations are far from uniformly distributed. This macro quantizes the
column results nonlinearly instead. The quantization centers are learned
offline from activation statistics, for example with a K-means variant that
first strips the pile-ups that ReLU and clamping cause at the range ends. The
ADC's reference levels are then placed at the midpoints between adjacent
centers. The converter is built *inside* the memory array. It is a ramp ADC
whose ramp comes from one extra column of ordinary bitcells. Each ramp step is
as large as the number of cells switched on during that step, so any set of
levels that fits in the column can be programmed, at 1 to 7 bits.

This repository holds SystemVerilog for the macro. The digital parts are
synthesizable RTL:

- the word-line drivers;
- the phase sequencer;
- the ramp controller;
- the ripple counters;
- the multi-bit weight encoder;
- the code-to-center table.

The analog parts are behavioural models with integer "voltages":

- the bitcell array;
- the reference column;
- the sense amplifiers.

## Main idea: floor comparisons that round to the nearest center

A ramp or comparator ADC performs a *floor*: it reports the index of the
largest reference level that the input reaches. To get *nearest-center*
rounding from that, reference level `i` is set to the midpoint between centers
`i-1` and `i`:

    R_0 = C_0,          R_i = (C_{i-1} + C_i) / 2   (i >= 1)

A table then maps the index back to the center. Worked example (centers in
6-bit data units, from a 4-bit layer):

| code | 0 or 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 | 10 | 11 | 12 | 13 | 14 | 15 |
|------|-----|-----|----|----|----|----|----|---|---|---|---|---|---|----|----|
| data | -16 | -10 | -6 | -4 | -3 | -2 | -1 | 0 | 1 | 2 | 3 | 4 | 6 | 10 | 16 |

A 4-bit conversion makes 15 comparisons, so the count runs from 0 to 15. The
first comparison is at the bottom center itself (`R_0 = C_0`). Codes 0
("below the range") and 1 therefore both map to the lowest center, and the
table holds 15 distinct values.

## Block diagram

```
             x[0..255] (signed, PWM)                 step table, n_init, pulse_w
                    |                                        |
              +-----v------+   adc_p/adc_n/adc_en   +--------v--------+
              | rwl_driver |<-----------------------| nladc_ramp_ctrl |--> sa_strobe
              +-----+------+                        +--------^--------+
     RWL+/RWL- (256 pairs, shared by all 129 columns)        | ramp_start / ramp_done
        +-----------+--------------------+          +--------+--------+
        |                                |          |  imc_phase_seq  |--> PCH_MAC, S1,
+-------v-----------------+   +----------v------+   +-----------------+    PCH_ADC, clr
| dual9t_array 256 x 128  |   | nladc_ref_column |
| (S1 + C_BL per column)  |   | 256 x 1 replica  |
+-------+-----------------+   +----------+------+
        | V_MAC[0..127]                  | V_ADC (one shared ramp)
   +----v----+ x128                      |
   |sense_amp|<--------------------------+
   +----+----+
        | V_ON pulses (thermometer code in time)
 +------v---------+ x128      +------------------+
 | ripple_counter |---code--->| nladc_center_lut |---> data[0..127]
 +----------------+           +------------------+
```

The RWL drivers feed every row of both the MAC columns and the reference
column. During the MAC phase they carry the input pulses. During the ADC phase
they carry the ramp pulses. The MAC columns ignore the ramp pulses because
their S1 switches are open and their capacitors hold V_MAC.

## The bitcell and the MAC phase

Each dual-9T cell stores a ternary weight in a 6T SRAM as `{V_L, V_R}`:
`+1 = (H,L)`, `0 = (L,L)`, `-1 = (L,H)` (`nladc_pkg::cell_t`). Two
independent read paths connect it to a left and a right read bit line:

- RWL+ applies a +1 input and RWL- a -1 input.
- A zero weight opens no discharge path at all.
- The column result is the bit-line difference `V_MAC = V_RBLR - V_RBLL`.

Inputs are pulse-width modulated. Input `x` keeps RWL+ (x > 0) or RWL- (x < 0)
high for `|x|` clock cycles. So after the window each column holds
`sum_k W_k * X_k`.

In the models, one voltage unit is one cell discharging for one clock cycle.
The model is exactly linear. It has no bit-line saturation, no mismatch and no
noise. In the macro this RTL follows, the 4-bit converter showed an error of
about N(0.21, 1.07) LSB in circuit simulation, rising about 1.2x at the slow
process corner. None of that error appears here.

**Multi-bit weights.** A weight of `w_bits` bits (2, 3 or 4, sign included)
uses `K = 2^(w_bits-1) - 1` parallel cells on consecutive rows, which all see
the same input:

- Magnitude bit 0 drives one cell, bit 1 two cells, bit 2 four cells.
- Every conducting cell carries the weight's sign.

A column therefore holds 256, 85 or 36 logical rows. `weight_encoder` does the
mapping. The loader in the top writes the K physical rows of a logical row over
K cycles. `rwl_driver` sends logical input `i` to physical rows `i*K .. i*K+K-1`.

## The in-memory NL-ADC

The reference column has 256 replica cells (`nladc_ref_column`):

- Rows 0-3 are **calibration cells**.
- Rows 4-255 are ramp cells, normally all programmed to +1.

One conversion of N bits, run by `nladc_ramp_ctrl`, has `2^N - 1` steps, and
each step ends in one comparison:

1. **Step 0, initial ramp.** RWL- is pulsed on the four calibration cells and
   on the first `n_init` ramp cells. RWL- on a +1 cell drives V_ADC negative.
   This gives `V_initcalib = -pulse_w * (n_init + sum of calibration weights)`.
   A calibration cell programmed to -1 raises V_initcalib by `pulse_w`. This is
   the knob that trims the point where the ramp crosses zero.
2. **Steps 1 .. 2^N-2.** RWL+ is pulsed on the next `step_cells[j]` cells. The
   groups lie back to back from row 4 down. Step j raises V_ADC by
   `pulse_w * step_cells[j]`. The initial ramp reuses the first ramp cells;
   a cell is never pulsed on both lines at once.
3. After every step, all 128 `sense_amp`s compare. Each emits a one-cycle
   `V_ON` pulse if `V_ADC <= V_MAC`.

The ramp only rises, so the pulses of a column form a thermometer code in time.
The column's `ripple_counter` counts them. The count is the ADC code: the
number of reference levels at or below V_MAC. `nladc_center_lut` maps it to a
signed 6-bit center. The table is programmable and shared by all columns.

**Programming a layer.** Given centers `C` in MAC units and a cell unit
`u = pulse_w`:

- `n_init = -R_0 / u`
- `step_cells[j] = (R_j - R_{j-1}) / u`
- the code table entries: `C_0, C_0, C_1, ...`

Every difference must be a whole number of cells. All `n_init` and step cells
must fit in the 252 ramp rows. For the example table above with centers scaled
by 10 and `u = 5`:

- `n_init = 32`;
- the steps are 6, 10, 6, 3, 2, 2, 2, 2, 2, 2, 2, 3, 6, 10 cells (58 in all);
- the smallest step is 10 units.

The end-to-end testbench derives exactly this configuration from the centers
and checks the resulting ladder against the midpoint references. At N = 7 a
ramp needs at least 126 step cells plus the initial ramp, which is why 7 bits
is the ceiling.

## One operation, cycle by cycle

`imc_phase_seq` drives the phases; `T = 2^in_bits - 1`, `S = 2^adc_bits - 1`.

| phase | cycles | what happens |
|-------|--------|--------------|
| PCH   | 1 | `PCH_MAC` clears the MAC bit lines and capacitors. The ripple counters are cleared. `pwm_start` latches `x[]`. |
| MAC   | T + 1 | `S1` is on. The RWL drivers apply the PWM pulses; their outputs are registered, so the last pulse lands in the extra cycle. |
| HOLD  | 1 | `S1` opens and C_BL holds V_MAC. `PCH_ADC` clears the reference column, which also saw the PWM pulses. `ramp_start` is issued. |
| RAMP  | S (pulse_w + 2) + 3 | Each step takes `pulse_w` pulse cycles, one settle cycle and one strobe cycle. Two tail cycles let the last V_ON be counted. |
| done  | 1 | `code[]` and `data[]` are valid until the next `start`. |

Counted from the clock edge that samples `start`, `done` is high in cycle
`T + S (pulse_w + 2) + 7`. At 200 MHz, with 6-bit inputs, a 4-bit ADC and
one-cycle pulses, that is 63 + 45 + 7 = 115 cycles (575 ns) for 128 dot
products of length 256.

## Interface of `nladc_imc_macro`

All signals are synchronous to `clk`, and `rst_n` is an asynchronous reset,
active low.

- **Weights.**
  - `w_we`, `w_row`, `w_data[128]` (signed 4-bit) write one logical row.
  - `w_ready` is low while the K physical rows are being written.
  - Weights follow `w_bits`. Logical rows whose group would pass row 255 are
    dropped.
  - The array has no reset, like an SRAM.
- **Reference column.** `ref_we`, `ref_row`, `ref_cell` write one cell.
- **Configuration.** These must stay constant during an operation:
  - `in_bits` (1-7), `w_bits` (2-4) and `adc_bits` (1-7);
  - `n_init` and `pulse_w` (at least 1);
  - the ramp step table: `step_we`, `step_addr` 1..126, `step_cells`;
  - the code table: `lut_we`, `lut_addr`, `lut_data`.
- **Operation.**
  - `start` (one cycle, while idle) launches an operation with `x[256]`.
  - `x[256]` holds signed 8-bit words; the magnitude saturates at
    `2^in_bits - 1`.
  - `busy` is high until `done`.
  - `code[128]` is 7 bits wide and `data[128]` is signed 6 bits.

Parameters `NROWS`/`NCOLS` default to 256/128. The shared constants are in
`rtl/nladc_pkg.sv`.

## What follows the source design and what does not

Taken from the design:

- the 256x128 array of dual-9T cells and the 256x1 replica column;
- the ternary cell encoding;
- PWM inputs with the sign on RWL+/RWL-;
- S1 switches that hold V_MAC on the bit-line capacitors;
- separate precharge of the MAC bit lines and of the ADC column;
- an initial ramp through RWL- and steps through RWL+;
- four calibration cells, leaving 252 cells for the ramp;
- a programmable number of cells per step, at 1-7 bits;
- one double-differential SA and one ripple counter per column;
- the midpoint rule and the index-to-center table, 6-bit data;
- 2-4 bit weights as parallel groups of 1, 2 and 4 cells;
- inputs from 1 to 7 bits.

Choices made here, where the description gives no detail:

- **One clock.** The design uses two clock domains, for the PWM inputs and for
  the ADC, but both run at 200 MHz.
- **Timing.** Every cycle-level edge in the table above is a choice of this
  RTL. That includes the registered word-line outputs, the settle and strobe
  cycles and the tail cycles.
- **Row layout of the ramp.** The step groups are contiguous from row 4 down,
  and the initial ramp uses the first ramp rows.
- **Ramp step size.** The pulse length `pulse_w` is programmable. This sets
  the scale between a ramp cell and a MAC unit.
- **Calibration.** It is done by programming calibration cells to -1 or 0.
  The calibration procedure itself, which finds the zero crossing, is not
  included; it is external.
- **Input and weight format.** Inputs are two's-complement with saturation.
  Weights are two's-complement, and the most negative code saturates.
  Multi-bit weights sit on consecutive rows.
- **Interfaces.** The row-wide weight port with its loader, the single shared
  code table at the macro output and the asynchronous clear of the counters
  are all choices of this RTL.
- **Ideal analog parts.** The models have no noise, saturation or offset. The
  voltage buffer is an ideal wire inside the reference-column model.

Not included:

- the offline clustering that produces the centers;
- the precharge and buffer circuits as circuits;
- any system around the macro: weight buffers, tiling of layers larger than
  256x128, accumulation of partial sums.

A whole network does not fit in one macro. ResNet-18 has about 11 M weights,
for example, and the macro holds 32,768 cells. It runs one 256x128 tile per
load at any of the precisions above.

## Files

| file | kind | content |
|------|------|---------|
| `rtl/nladc_pkg.sv` | package | sizes, widths, `cell_t` |
| `rtl/nladc_imc_macro.sv` | RTL (top) | the macro and the weight loader |
| `rtl/rwl_driver.sv` | RTL | PWM word-line drivers, ramp pulse mux, row fan-out |
| `rtl/imc_phase_seq.sv` | RTL | PCH / MAC / HOLD / RAMP sequencing |
| `rtl/nladc_ramp_ctrl.sv` | RTL | ramp step sequencing and step table |
| `rtl/ripple_counter.sv` | RTL | asynchronous toggle counter |
| `rtl/nladc_center_lut.sv` | RTL | code-to-center table |
| `rtl/weight_encoder.sv` | RTL | multi-bit weight to 1/2/4 cell groups |
| `rtl/dual9t_array.sv` | behavioural model | MAC array, precharge, S1, C_BL |
| `rtl/nladc_ref_column.sv` | behavioural model | replica column and voltage buffer |
| `rtl/sense_amp.sv` | behavioural model | strobed comparator |

The behavioural models are written in synthesizable style, with integer
voltages, so that every tool reads them. They stand for analog circuits all
the same.

## Simulation

Each module has a self-checking testbench `tb/tb_<module>.sv`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog if it hangs.
With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/nladc_pkg.sv tb/tb_nladc_imc_macro.sv --top-module tb_nladc_imc_macro
./obj_dir/Vtb_nladc_imc_macro
```

`tb_nladc_imc_macro` runs the full-size macro with default parameters, in
about 10 s of wall time. It works through five configurations:

1. the 4-bit example layer (6-bit inputs, 2-bit weights), with its ramp
   derived from the centers by the midpoint rule;
2. the same converter with a calibration offset;
3. the 3-bit ResNet-18 setting (6/2/3 bits);
4. a 7-bit converter with 3-bit weights;
5. a 1-bit converter with 4-bit weights.

It checks every column's code and table value against an independently
computed dot product and reference ladder, and checks the latency formula. It
also counts, and requires, each of the following: codes at both ends of the
range, negative results, saturation of inputs and of weights, calibration, all
three weight widths, and S1 holding V_MAC while the ramp pulses the shared
word lines.

`tb_workload_resnet_stem` maps the first convolution of a CIFAR-style
ResNet-18 onto the macro. The layer has 3x3x3 kernels and 64 filters, so its
27 weights per filter take 27 rows, and each filter takes one column. The
testbench feeds a synthetic 8x8x3 image patch by patch, 36 operations in all.
It checks every output against the nearest center of the directly computed
convolution sum. This shows end to end that the midpoint references, the floor
conversion and the code table together round to the nearest center.

`tb_workload_tiles` runs one full tile of three larger networks, each at its
own precision. A tile is as many logical rows as the array holds at that
weight width, by 128 columns. The three tiles are:

| tile | weights | rows | inputs | ADC |
|------|---------|------|--------|-----|
| VGG-16 | 3-bit (3 cells) | 85 | 6-bit, non-negative | 3-bit, 7 references |
| Inception-V3 | 4-bit (7 cells) | 36 | 6-bit, non-negative | 4-bit, 15 references |
| DistilBERT projection | 4-bit (7 cells) | 36 | 6-bit, signed | 4-bit, 15 references |

Each tile uses random weights, 12 random input vectors and non-uniform
centers. The testbench checks every output against the nearest center of the
exact dot product, and checks each operation's cycle count.

Testbenches do not rely on X: every state that is read is reset or written
first.

The RTL also carries a few concurrent assertions, which `--assert` enables.
They check that:

- `start` and `pwm_start` only come while the block is idle;
- a ramp step never drives RWL+ and RWL- of the reference column together;
- `w_we` only comes while `w_ready` is high;
- `S1` stays open while the ramp runs.
