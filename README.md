# TimeFloats: floating-point scalar products in a memristor crossbar, in the time domain

TimeFloats computes floating-point dot products inside a memory array. The
aim is to train a network, not only run it, on the same memory that stores
its weights. A weight matrix is stored in a passive memristor crossbar. Each
cell holds an 8-bit floating-point weight as two 4-bit memristors: one for
the mantissa and one for the exponent. An 8-bit floating-point input vector
is applied to the array. For every row, the macro returns the floating-point
scalar product of the input vector with that row.

The central idea is to carry every intermediate quantity as the **width of
a pulse** instead of as a voltage or a multi-bit word:

* Exponents are added by putting two resistances in series and timing an RC
  discharge. The pulse width follows `I_E + W_E`.
* The largest exponent is found by racing pulses through a tree of flip-flops
  and multiplexers.
* Each mantissa is aligned by shifting it once per clock tick. The shifting
  lasts as long as the difference between its pulse and the largest pulse.
* The mantissa products are summed as charge. A pulse of width `T_i` drives
  a memristor of conductance `g_ij`, and the row line integrates
  `sum_i T_i * g_ij`.

Only the final sum is converted by an ADC. One 4-bit ADC is shared by all
rows.

This repository holds a SystemVerilog model of one such macro at its
published size: a 64-element vector against 64 rows. In it, the digital
parts are synthesizable RTL. The analog parts are cycle-level behavioural
models that have their real ports. These are the RC exponent adder, the
crossbar, the integrators, the hold cells, the analog multiplexer and the
ADC's comparator and DAC.

## Number format

| field    | bits | meaning |
|----------|------|---------|
| exponent | 4    | `e`, bias 8, so `2^(e-8)` |
| mantissa | 4    | `m`, an unsigned integer 0..15 |

Value = `m * 2^(e - 8)`. There is no sign bit and no hidden leading one. The
4 + 4 split is the source design's. The bias and the plain-integer mantissa
are this implementation's choices: the published circuit figure loads a
mantissa whose top bit is 0 into the shift register, so no implicit one can
be present there. Sign handling is not described for the circuits and is
left out.

The result of a row has a 4-bit normalised mantissa (MSB = 1 unless the
result is zero) and a **6-bit** exponent with bias 16 (`fp_out_t` in
`tf_pkg`). A sum of two 4-bit exponents plus the ADC scale spans about 40
binades, which a 4-bit exponent cannot hold.

## What one row computes

For row `r`, with `E_i = I_E^i + W_E^{ri}`:

```
E_max = max_i E_i                      ID = lowest i with E_i = E_max
S_i   = I_M^i >> (E_max - E_i)         (0 once the difference is >= 4)
P     = sum_i S_i * W_M^{ri}           (<= 64*15*15 = 14400)
code  = min(floor(P / 2^10), 15)       4-bit ADC, full scale 2^14
y     = code * 2^(10 + E_max - 16)     then normalised
```

The alignment step is where the precision is lost. A mantissa whose exponent
is four or more below the maximum does not contribute, and the rest are
truncated. The source design describes this as "sparsity": these terms cost
no pulse energy. The 4-bit ADC adds a second, coarse quantisation of the
sum. This makes the behaviour of the macro different from an exact FP8 dot
product, so the testbenches compare against the formula above and not
against exact arithmetic.

## Time base

Everything runs on one clock, and a clock tick is the pulse-width quantum:

* one exponent LSB adds one tick to an exponent-sum pulse;
* one mantissa LSB adds one tick to a T-DAC pulse, so the longest mantissa
  pulse is 15 ticks. At the source's 15 ns maximum that is a 1 ns tick;
* one tree level of the detector adds one tick of delay.

A pulse is a 1-bit signal that is high for a number of ticks. All pulses
of one phase rise in the same tick.

## The five steps, block by block

```
 x_ld ──► exp_adder[i] ──pulse E_i──┬──────────────► largest_exp_detector ──E_max pulse──┐
          (I_E reg)        ▲        │                      │ ID                          │
                           │ W_E    └─► mantissa_scaler[i] ◄─────────────────────────────┘
 memristor_crossbar ───────┘            (I_M reg, delay, XOR, shift reg)
   ▲ row_sel                                  │ S_i
   │                                      time_dac[i] ──pulse S_i──► crossbar mantissa lines
   │                                                                     │ charge per row
 tf_controller                           charge_integrator[r] (integrate, hold)
                                                   │
                                analog_mux ─► sar_adc ─► fp_reformatter ─► y
                                   ▲ row_sel      ▲ E_max from pulse_tdc
```

### 1. Exponent addition (`exp_adder`, behavioural)

The input exponent sits in a register. In silicon, its bits switch
binary-weighted transistors that form a resistance R1. The weight exponent
is the resistance R2 of the exponent memristor in the one crossbar row whose
row line is grounded; the other rows float. The node is precharged and then
released, and a clocked comparator at VDD/2 outputs a pulse for as long as
the discharge takes. The source design shows this width to be linear in
R1 + R2, with an offset. The model counts down `OFFSET + I_E + W_E` ticks,
with `OFFSET = 1`. This offset matters: a zero-width pulse has no falling
edge, and the detector needs one.

### 2. Largest-exponent detector (`largest_exp_detector`, `pulse_max_cell`)

This is the least obvious block. Each tree node is a D flip-flop and a 2:1
multiplexer. All pulses rise together:

* pulse `a` drives D and pulse `b` drives the flip-flop's clock;
* at the falling edge of `b` the flip-flop samples `a`. A 1 means `a` is
  still high, so `a` is the longer pulse;
* Q drives the mux select (I0 = `b`, I1 = `a`).

The mux output therefore follows `b` up to `b`'s falling edge. If `a` is
still high at that edge, the output switches to `a` and stays high. Its
width is `max(width_a, width_b)`: the node passes on the longer pulse, not
just a flag saying which one it was. A tree of log2(N) levels delivers the
longest of N pulses at the root.

The index of the winner comes from the select bits. The root's select is
the ID MSB. Each lower bit is the select of the winning child one level
down, so bit k is picked by the bits above it. The source figure draws this
for 8 inputs with a 2:1 and a 4:1 multiplexer. Here it is a loop that walks
down the tree.

In the RTL, the falling edge of `b` is detected on the time-base clock. The
sampled value takes effect in the same tick, so the output does not dip.
Each node registers its output, which gives one tick of delay per level.
Equal widths keep `b`, which is always the lower-numbered subtree, so ties
resolve to the lowest index. The select flip-flops are cleared before every
search.

### 3. Exponent normalisation and mantissa scaling (`mantissa_scaler`)

Each element's exponent pulse goes through a delay line of log2(N)
registers. This stands for the source's inverter chain, matched to the
detector's delay. The delay makes the element's pulse and the `E_max` pulse
rise in the same tick. Their XOR is then high for exactly `E_max - E_i`
ticks. While it is high, a shift register preloaded with the input mantissa
shifts right once per tick. A separate register keeps the original mantissa
so that it can be preloaded again for every row.

### 4. Mantissa MAC (`time_dac`, `memristor_crossbar`, `charge_integrator`)

The scaled mantissa is loaded into a T-DAC. This is a register, a counter
and a comparator: `cmd` starts the counter, and the output stays high until
the count equals the register. The pulse drives a mantissa line of the
crossbar. In every tick, each row line collects the sum of the `W_M` codes
of the columns whose pulse is high. That is the model's current, with
conductance proportional to the code. Each row's integrator accumulates this
sum, so after the MAC phase it holds `sum_i S_i * W_M^{ri}`. All rows
integrate, but only the selected row's inputs were scaled for it, so only
that row's value is used.

### 5. Digitisation and reformatting (`analog_mux`, `sar_adc`, `fp_reformatter`, `pulse_tdc`)

The integrators are copied into hold cells. The analog multiplexer sends the
selected row's value to the one shared ADC. The ADC is a 4-bit SAR that
tests one bit per clock, MSB first. Its full scale of 2^14 covers the
largest possible sum.

`E_max` is needed as a number, so `pulse_tdc` counts the ticks of the
detector's output pulse, and the adder offset is subtracted from the count.
The reformatter then shifts the code left until its MSB is 1 and lowers the
exponent by the same amount.

## Schedule (`tf_controller`)

The mantissa scaling depends on the row's weight exponents, so rows are
processed one at a time:

| phase | clocks | what happens |
|-------|--------|--------------|
| CLEAR | 1 | clear detector, `E_max` counter, integrators; preload mantissas |
| EXP   | 40 | adders fire on the first tick; detector and scalers run |
| LOAD  | 1 | scaled mantissas into the T-DACs |
| MAC   | 17 | T-DACs fire on the first tick; integrators integrate |
| HOLD  | 1 | integrators into hold cells |
| ADC   | 6 | one start tick, four SAR ticks, one done tick |
| FMT   | 1 | reformat; result valid on the next clock |

That is 67 clocks per row, and 4288 clocks for all 64 rows. The EXP window
is `OFFSET + 30 + log2(N) + 3`. The MAC window is `2^4 + 1`. Both are sized
to the longest possible pulses. The phases do not overlap.

## Top-level interface (`timefloats_top`)

Parameters: `N_IN` (vector length, default 64) and `N_ROWS` (default 64).

1. Program weights with `w_prog_en`, `w_prog_row`, `w_prog_col` and
   `w_prog` (`fp8_t`), one cell per clock.
2. Load the input vector with `x_ld_en`, `x_ld_idx` and `x_ld`, one element
   per clock.
3. Pulse `start`. `busy` stays high during the run.
4. For every row in order, `y_valid` pulses with:
   * `y_row`;
   * `y` (`fp_out_t`) and `y_zero`;
   * the raw `y_adc_code`;
   * `y_emax_sum`, the row's largest exponent sum;
   * `y_emax_id`, the index of that element.

   Consecutive results are 67 clocks apart. `done` pulses together with the
   last row's `y_valid`.

The weights and inputs stay stored, so a new run can be started after
reloading either one. Writing either port while `busy` is high violates an
assertion, since both are read throughout a run. Two more assertions guard
the ADC handshake: no `start` during a conversion, and no `adc_done` outside
the ADC phase.

## Files

| file | block | kind |
|------|-------|------|
| `rtl/tf_pkg.sv` | formats and constants | package |
| `rtl/exp_adder.sv` | RC exponent adder with input-exponent register | behavioural |
| `rtl/pulse_max_cell.sv`, `rtl/largest_exp_detector.sv` | largest-exponent detector | RTL |
| `rtl/mantissa_scaler.sv` | delay line, XOR, mantissa shift register | RTL |
| `rtl/time_dac.sv` | counter/comparator pulse generator | RTL |
| `rtl/memristor_crossbar.sv` | W_M/W_E storage, row-grounded exponent read, charge per tick | behavioural |
| `rtl/charge_integrator.sv` | op-amp integrator and hold cell | behavioural |
| `rtl/analog_mux.sv` | row-to-ADC multiplexer | behavioural |
| `rtl/sar_adc.sv` | shared 4-bit SAR ADC | behavioural |
| `rtl/pulse_tdc.sv` | `E_max` pulse counter | RTL |
| `rtl/fp_reformatter.sv` | normalisation to floating point | RTL |
| `rtl/tf_controller.sv` | row select and sequencer | RTL |
| `rtl/timefloats_top.sv` | the macro | RTL |

Every block has a self-checking testbench `tb/tb_<module>.sv`. Each compares
against values computed in the testbench and prints
`TB_RESULT checks=N failures=M`.

`tb_timefloats_top` runs the full 64 x 64 macro with no parameter
overrides. It programs all 4096 cells and runs four scenarios:

* aligned exponents with large mantissas, which reach full-scale codes;
* fully random operands, which mostly round to zero;
* two mixed sets, one of them with the weights left unchanged from the
  previous scenario.

It checks:

* every row result, `E_max` and ID;
* the 67-clock spacing of the results.

It also counts how often each mechanism occurred: full-scale codes, zero
results, normalising shifts, partial mantissa shifts, mantissas scaled to
zero, exponent ties, reprogramming and reloading. A mechanism that never
occurred counts as a failure.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl --top-module tb_timefloats_top \
          rtl/tf_pkg.sv tb/tb_timefloats_top.sv -o sim
./obj_dir/sim
```

Replace `tb_timefloats_top` with any other testbench name to run that one.
The full-size build takes about a minute, and the run takes under a second.
Verilator simulates with two states and no X, so every register has a
reset.

## How far to trust it, and where it departs from the source

* **Analog parts are ideal.** The adder is exactly linear and the crossbar
  conductance is proportional to its code. The integrator and the hold cell
  have no leakage, and the ADC has no offset. The source design's point
  about process variability does not show up here: exponent errors matter
  much more than mantissa errors. The calibration knobs (bias voltage,
  calibration memristors, program-read-tune loops) are not modelled.
* **Weight programming** is a plain write port. No in-place update circuit
  for training, and no transposed (backward) pass, is described in the
  source, so neither is built.
* **Mantissa-to-pulse conversion.** The source describes it once as an RC
  circuit and once as a digital counter-based T-DAC. The digital T-DAC is
  used here.
* **Chosen here, not given by the source:**
  * the exponent bias;
  * no hidden mantissa bit;
  * the 6-bit output exponent;
  * the ADC full scale;
  * counting the `E_max` pulse to digitise it;
  * the tie rule of the detector;
  * the one-tick-per-level detector delay;
  * the controller schedule and its windows;
  * the host ports.
* **Throughput.** Row processing is strictly sequential and is not
  pipelined. In particular, the exponent phase of the next row does not
  overlap the ADC phase of the current one.
