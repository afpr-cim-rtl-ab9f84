# AFPR-CIM in SystemVerilog: analog floating-point compute-in-memory with an adaptive-range FP-ADC

Neural networks increasingly use 8-bit floating point (FP8) for activations. Digital FP8
hardware spends much of its power on aligning exponents before each addition.
AFPR-CIM avoids that work. Inside the memory array everything is plain integer analog
computation: row voltages times RRAM conductances, summed as currents on the column
lines. Floating point exists only at the two edges of the array:

* an **FP-DAC** turns an FP8 activation (2-bit exponent E, 5-bit mantissa M) into a row
  voltage `2^E x 1.M`, using a programmable-gain amplifier for the exponent;
* an **adaptive-range FP-ADC** turns each column current straight into an FP8 code.
  While the current is integrated, the ADC widens its own range by adding capacitors
  whenever the integrator output reaches 2 V. The number of widenings is the exponent.
  A single-slope conversion of the remaining voltage, which always lies between 1 V and
  2 V, gives the mantissa.

This repository holds RTL and behavioural models for the whole core: four 576 x 256
macros and the digital FP back end that adds partial sums across macros and applies
activation and pooling. The design follows the AFPR-CIM paper (Liu, Qian, Wu, Ren, Liu,
Ni). This document describes what was built from it and where it departs.

The analog parts cannot be written as logic: the RRAM cells, integrators, capacitors,
comparators, resistor ladders and amplifiers. They are **behavioural models** with
integer voltages and currents. Their files say so in their first line. The digital
parts are synthesizable RTL: the adaptive control, the encoders, registers and counters,
the sequencer and the back end.

## 1. Number format

| field | bits | meaning |
|---|---|---|
| `m` | 5 | mantissa, implicit leading one: significand `1 + m/32` |
| `e` | 2 | exponent, value `x 2^e` |
| `sign` | 1 | negative (digital back end only) |
| `nz` | 1 | 0 = the value is zero |

An E2M5 word (`e`,`m`) is worth `(1 + m/32) x 2^e`, which spans 1.0 to 15.75. The
implicit one is not stated in words by the paper. It follows from the FP-DAC linearity
data: at exponent 0, the cell current at M = 31 is about (32+31)/(32+1) times the
current at M = 1.

E2M5 with an implicit one has no code for zero. The ADC, however, can report that a
current was too small to be read out. So the word carries an extra flag `nz`. The paper
gives no sign handling, and the analog path only computes with non-negative values. The
sign bit is used in the back end, after partial sums from a "negative weight" macro have
been subtracted (section 6). Both extra bits are additions of this design. The type is
`afpr_pkg::fp8_t`, 9 bits wide.

In the back end, values are added in fixed point with 1.0 = 32. A word is then worth
`(32 + m) << e`, from 32 to 504 (`fp_mag`, `fp_to_fx`). `fx_to_fp` converts back. It
truncates the mantissa, flushes magnitudes below 1.0 to zero and saturates magnitudes
above 15.75 to `1.11111 x 2^3`.

## 2. One macro

```
 in_wr ──► input_fp_buffer ──► 576 x fp_dac ──► rram_crossbar (576 x 256) ──► 256 x fp_adc ──► result[256]
            (576 x fp8_t)        V = 2^E·1.M        I_c = Σ V_r·G_rc             E2M5 codes
                                                                ▲                    ▲
                               control_unit (phases) ───────────┴────────────────────┤
                               sharing_unit (5-bit counter + V_th/ramp) ─────────────┘
```

* `input_fp_buffer` holds one activation per row. It is written one row per clock and
  read by all DACs in parallel.
* `fp_dac` (model) produces `v_dac = (32 + m) << e`, in units of 1/32 of the DAC's 1.0
  level. It contains the synthesizable `exp_decoder_2to4`, which closes one of the four
  PGA gain switches (x1, x2, x4, x8). A word with `nz = 0` drives no current.
* `rram_crossbar` (model) consists of 256 `rram_column` models. Each column stores 576
  conductance levels of 0..31 µS and forms `I = Σ V_r G_r`. The array is programmed one
  row (256 levels) per clock. The currents are evaluated during the reset phase of each
  operation and then held; in the circuit they settle while the integrators are reset.
* `fp_adc`: one per column, described next.

## 3. The adaptive-range FP-ADC (`fp_adc`)

This is the core idea of the design, and its least obvious part.

**Circuit.** An active integrator holds the column line at V_r = 0 and integrates the
column current on C1 = C_int. Three more capacitors can be switched in parallel by sw1,
sw2 and sw3: C2 = C_int, C3 = 2·C_int and C4 = 4·C_int. The total capacitance is then
1, 2, 4 or 8 C_int. A comparator compares the integrator output V_O with a
column-shared reference V_th.

**Adaptive phase.** V_th is 2 V. Each time V_O exceeds 2 V, the comparator fires. The
three-flip-flop chain in `adaptive_ctrl` then closes the next switch. The charge
already integrated is shared with the new capacitor, and because each new capacitor
equals everything already connected, V_O drops from 2 V to exactly 1 V. Charge is
conserved, so the measured quantity stays continuous across the step: `2 x 2^n` becomes
`1 x 2^(n+1)`. At the sampling moment T_S the integration stops. At that point:

```
   integrated charge / (C_int · 1 V)  =  (V_M / 1 V) · 2^n ,   1 V < V_M <= 2 V
```

Here n is the number of closed switches. `therm2bin` turns the thermometer code of the
switches into the 2-bit exponent n.

**Readout phase.** V_th becomes a ramp from 1 V to 2 V in 32 steps of 31.25 mV, driven
by the column-shared 5-bit counter (`sharing_unit` = `ss_counter` + `vth_ramp_gen`).
The comparator stays high while V_M is above the ramp. `mantissa_reg` latches the count
at the first step where it is low:

```
   M = smallest k in 0..31 with 1 V + k/32 V >= V_M      (= ceil((V_M - 1 V) · 32))
```

The paper's text describes the readout comparator as going high once the ramp passes V_M.
Here the comparator keeps the same sense as in the adaptive phase (V_O > V_th), so the
count is latched at its falling edge instead. The captured count is the same either way.
This is the rule that reproduces the paper's worked example. There, V_M = 1.271 V after
two range adjustments reads as E = 10, M = 01001. The ideal voltage of that code is
1 + 9/32 = 1.28125 V.

**Edge cases.** All of these are this design's choices, unless the paper is quoted.

| case | condition | result |
|---|---|---|
| not read out | no adjustment and V_M <= 1 V (comparator already low at the first ramp step) | `nz = 0`. The paper says only that such a result "is not read out". |
| mantissa saturation | ramp never reaches V_M (V_M > 1.96875 V) | M = 31 |
| overflow | V_O exceeds 2 V with all three switches closed | E = 3, M = 31, `ovf = 1` |

**Timing (`control_unit`).** The paper's transient shows a reset to about 5 ns, sampling
at 100 ns and a readout to 200 ns; it also reports a 0.2 µs macro latency. With a
3.125 ns clock (32 ramp steps in 100 ns, an assumption) the phases are:

| phase | clocks | strobes |
|---|---|---|
| reset | 2 | `rst_ph`: integrators, switches, registers and counter cleared; array currents evaluated |
| adaptive (integrate) | 29 | `integ`, `adapt_en` |
| settle after T_S | 1 | `adapt_en` only: catches a crossing on the last integrating clock |
| readout | 32 | `read_en`; `first` on the first step |

That makes 64 clocks = 200 ns, so `done` pulses 64 clocks after `start`. One macro
operation is 576 x 256 multiply-accumulates: 2 x 147,456 operations in 200 ns is the
paper's 1474.56 GOPS.

**The model.** `adc_frontend` keeps the integrated charge q as an integer in
µV x C_int x 256. Every integrating clock adds `i_mac x GAIN_Q8`. V_O = q / C_total,
and the comparator output is `V_O > V_th`. `GAIN_Q8` stands for the unknown C_int and
clock period, and it sets which current maps to 1.0. The default of 45 puts a
half-dense full-size macro at exponents 0 to 3. In the RTL the flip-flop chain is
clocked by the system clock, with the comparator as an enable. In the paper's schematic
the comparator clocks the chain directly.

## 4. FP-DAC (`fp_dac`, `exp_decoder_2to4`)

A resistor ladder shared by many rows supplies the reference levels. A switch tree
steered by M4..M0 selects the level 1.M, and the 2-to-4 decoder of E1E0 sets the PGA
gain to 2^E. So `V_DAC = 2^E x M_analog`. Only the decoder is logic. The ladder is not
modelled on its own: its levels are folded into `fp_dac`.

## 5. Sequencing and sharing (`control_unit`, `sharing_unit`)

The paper names a control unit and a "DAC & ADC sharing unit" but does not describe
them. Here the control unit is the phase sequencer of section 3, with `start`/`busy`/
`done`. The sharing unit holds what all 256 columns share: the readout counter and the
threshold/ramp generator.

## 6. Digital back end (`partial_accumulator`, `activation_unit`, `pooling_unit`, `output_fp_buffer`)

The four macros run in lock step. Each produces 256 E2M5 results, 1024 in all. The back
end is a three-stage pipeline, started by `done`:

1. **Partial accumulator.** A layer with more than 576 input rows is split across
   macros, so each macro's column holds a partial sum of the same output. The
   accumulator adds the results of the macros selected by `acc_mask`. A macro with its
   bit set in `acc_neg` is subtracted instead, so negative weights can live on a macro of
   their own. The sum is divided by `2^acc_shift` (toward zero) and re-encoded as FP8;
   `acc_sat` reports saturation. Summing is the paper's. Mask, subtraction, scale and
   rounding are this design's.
2. **Activation.** `act_mode` selects bypass, ReLU or ReLU6 (clamp at 6.0 =
   `1.10000 x 2^2`). The paper names the stage but not the function. ReLU and ReLU6 are
   the activations of the networks it evaluates.
3. **Pooling.** Max pooling over `pool_win` consecutive operations, per channel.
   `pool_win = 1` passes each vector through. The positions of one window are meant to
   be issued one after another.

The paper's architecture figure orders the stages accumulate, activation, pooling,
which is the order built. Its mapping figure draws accumulate, pooling, activate. For
ReLU and max pooling both orders give the same result.

The result vector lands in `output_fp_buffer`. `out_valid` pulses, `out_vec` holds the
whole vector, and `out_rd_addr`/`out_rd_data` read it one word at a time. With
`pool_win = 1`, `out_valid` comes 4 clocks after `done`.

## 7. Top-level use (`afpr_cim_top`)

1. Program the weights: for each macro and row, drive `prog_en`, `prog_macro`,
   `prog_row` and `prog_g[0..255]`, one row per clock. Conductance levels are 0..31.
2. Load the activations: `in_wr_en`, `in_macro`, `in_row`, `in_data`, one row per clock.
   Unwritten rows are zero after reset.
3. Set `acc_mask`, `acc_neg`, `acc_shift`, `act_mode` and `pool_win`, then pulse `start`.
   Keep inputs and configuration stable until `out_valid`.
4. `macro_result[k][c]` and `macro_ovf[k][c]` hold the raw ADC codes after `done`.

Parameters and defaults: `NMACRO = 4`, `ROWS = 576`, `COLS = 256` (the paper's sizes),
`G_BITS = 5` and `GAIN_Q8 = 45` (assumed).

## 8. Files

| file | kind | content |
|---|---|---|
| `rtl/afpr_pkg.sv` | package | `fp8_t`, constants, format conversions |
| `rtl/afpr_cim_top.sv` | model (top) | four macros and the back end |
| `rtl/afpr_macro.sv` | model | one macro |
| `rtl/input_fp_buffer.sv` | RTL | activation buffer |
| `rtl/fp_dac.sv`, `rtl/exp_decoder_2to4.sv` | model, RTL | FP-DAC and its exponent decoder |
| `rtl/rram_crossbar.sv`, `rtl/rram_column.sv` | model | RRAM array |
| `rtl/fp_adc.sv` | model | one ADC column |
| `rtl/adc_frontend.sv` | model | integrator, capacitor array, comparator |
| `rtl/adaptive_ctrl.sv`, `rtl/therm2bin.sv`, `rtl/mantissa_reg.sv` | RTL | ADC digital part |
| `rtl/sharing_unit.sv`, `rtl/ss_counter.sv`, `rtl/vth_ramp_gen.sv` | model, RTL, model | column-shared counter and ramp |
| `rtl/control_unit.sv` | RTL | phase sequencer |
| `rtl/partial_accumulator.sv`, `rtl/activation_unit.sv`, `rtl/pooling_unit.sv`, `rtl/output_fp_buffer.sv` | RTL | back end |

## 9. Verification

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=F` and has a watchdog. Expected values are computed
independently, from closed forms or real arithmetic. Highlights:

* `tb_fp_adc` runs full conversions for the paper's example and 150 random currents.
  The codes are checked against the closed-form quantisation (exponent = number of
  2 V x 2^e thresholds passed; M = ceil((V_M − 1 V)·32)), including zero and overflow.
* `tb_fp_dac` checks all 128 codes. `tb_control_unit` checks the phase lengths and the
  64-clock latency.
* `tb_afpr_cim_top` is an end-to-end test at reduced size (16 x 8 cells per macro). It
  checks ADC codes, latency and back-end outputs over 24 configurations. It also counts
  how often each mechanism occurred: exponents 0–3, not-read-out results, overflow,
  multi-macro sums, subtraction, saturation, ReLU, ReLU6 and pooling. A mechanism that
  never occurs is a failure.
* `tb_afpr_cim_full` runs the top at its default size, with no parameter changed. It
  programs all 4 x 576 x 256 cells and checks all 1024 ADC codes and the output vectors
  of three operations. It simulates in well under a minute.
* Two tests replay the paper's circuit examples. `tb_dac_linearity` drives all 128 input
  codes through the FP-DAC into one RRAM cell at 12, 15, 18 and 20 µS. It checks that
  the current is G x 2^E x (1 + M/32): linear in M and doubling per exponent step.
  `tb_adc_transient_example` runs one full-size macro with default parameters. All 576
  rows carry the code 1011110 and the cells are 7 µS. That column integrates past two
  thresholds, is halved back to about 1 V twice, holds V_M = 1.274 V and reads 1001001,
  the paper's example code. The other 255 columns are checked against the closed form.
* `tb_conv_layer_mapping` runs a whole convolution layer on the default-size top: a
  3 x 3 kernel over 128 input channels and 256 output channels. Unrolled, that is a
  1152 x 256 matrix, with row = c1·9 + ky·3 + kx. Its positive weights sit on macros 0
  and 1, and its negative weights on macros 2 and 3, which are subtracted. Four output
  positions go through ReLU and a 2 x 2 max pool. Each sum is compared with the ideal
  real-valued convolution, and agrees to within the converters' quantisation error.

Run any of them with plain Verilator from the repository root, for example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_afpr_cim_full \
  -y rtl -y tb +libext+.sv -Irtl rtl/afpr_pkg.sv tb/tb_afpr_cim_full.sv
./obj_dir/Vtb_afpr_cim_full
```

Verilator simulates with two-state logic, so every state that is read is reset or
written first.

## 10. How far to trust it, and what it leaves out

* **From the paper:** the data path and sizes (576 x 256 cells per macro, four macros,
  E2M5, 5-bit counter); the capacitor ratios 1:1:2:4 and the 2 V / 1 V levels; the
  flip-flop chain and thermometer-to-binary exponent; the single-slope mantissa and its
  worked example; the 2-to-4 PGA decoder; the 0.2 µs latency.
* **This design's choices:** the clock (3.125 ns) and the split into 64 clocks; the
  zero/sign bits; the capture rule at ties; saturation and overflow handling; the
  integrator gain; 5-bit conductance levels; all interfaces; the accumulator's mask,
  subtraction and scaling; the activation functions; the pooling type.
* **Not modelled:** noise, offsets (the C_CDS cancellation is taken as ideal), device
  non-linearity and variation; RRAM programming (write-verify); sparsity; power.
* **Capacity:** the four macros hold 589,824 weights. That is far fewer than the
  evaluated networks (ResNet18/50, MobileNetV2/V3 have 3.5–25.6 M weights), so they are
  not resident. A layer can use at most 4 x 576 = 2304 input rows per operation, since
  the back end does not accumulate across operations.
* **Synthesis:** the behavioural models synthesize into very large netlists, with one
  multiplier per RRAM cell and wide charge registers. Only the RTL blocks are meant for
  implementation.
