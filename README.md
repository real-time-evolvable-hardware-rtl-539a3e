# Evolvable cusp-like pulse shaper

In nuclear spectroscopy a detector and its preamplifier produce a pulse that
rises quickly and then decays exponentially. The energy of the particle is in
the pulse height. A *cusp-like shaper* is a short recursive filter that turns
this exponential into a symmetric peaked pulse. The peak height measures the
energy, and the steep flanks make it robust against noise. The filter has four
parameters: two delays, `k` and `l`, and two gains, `m1` and `m2`. Their correct
values depend on the pulse. After radiation damage, the sensor's pulses come
out smaller and noisier, and the shaper, which is tuned for the original
pulse, then mismeasures.

This design makes the shaper *evolvable*. A genetic algorithm (GA) searches
the 40-bit space of `(k, l, m1, m2)` for the configuration whose response to a
stored reference input comes closest to a stored golden response. The
hardware evaluates each candidate configuration in real time, on the same
shaper that filters the sensor data. The GA's bookkeeping runs as software on
a processor attached over APB: population, selection, crossover and mutation.
The best configuration found is then applied to the sensor path.

The RTL here is everything except that processor: the shaper, the fitness
evaluation, the input multiplexer, the evaluation controller and the APB
register file.

```
 sensor v(n) ──►┌─────┐  v   ┌──────────────┐ s(n)
                │ mux ├─────►│ cusp_shaper  ├───────┬──────────────► s_out
 v_ref(n) ─────►└──▲──┘      └──────▲───────┘       │
   ▲               │ sel_ref        │ (k,l,m1,m2)   ▼
 ┌─┴───────────────┴───┐     ┌──────┴────────┐  ┌────────────────┐
 │ fitness_eval        │◄────┤eval_controller│  │ |s - s_ref|, Σ │ F2
 │ v_ref / s_ref regs  │     └──────▲────────┘  │ (fitness_eval) ├──┐
 └─────────────────────┘            │ cmds/status └──────────────┘  │
                              ┌─────┴────────────────────────┐      │
                       APB ◄─►│ apb_regfile: chrom_msb,      │◄─────┘
                   processor  │ chrom_lsb, fitness, ctrl,    │
                              │ threshold                    │
                              └──────────────────────────────┘
```

## The shaper recursion

For input samples `v(n)`, with every signal zero before `n = 0`:

```
d^k(n) = v(n) - v(n-k)
d^1(n) = v(n) - v(n-1)
p(n)   = p(n-1) + d^k(n) - k * d^1(n-l)
q(n)   = q(n-1) + m2 * p(n)
s(n)   = s(n-1) + q(n) + m1 * p(n)
```

`p(n)` is the pulse after pole-zero-style differencing and one integration.
`q` and `s` are two further integrations, weighted by `m2` and `m1`. In the
classic tuning, `k = 2l + 1`, `l` sets the rise and fall time, and
`m1/m2 = 1/(exp(Tclk/tau) - 1)` depends on the decay constant `tau`. Here all
four parameters are free, because the GA finds them.

`cusp_shaper` maps this onto hardware as follows.

| signal | hardware | width |
|---|---|---|
| `v(n-k)` | `delay_line` DELAY1, select `k` | 14 |
| `v(n-1)` | REG1 | 14 |
| `d^k`, `d^1` | subtractors | 14, wrapping |
| `d^1(n-l)` | `delay_line` DELAY2, select `l` | 14 |
| `k * d^1(n-l)` | multiplier X3; `k` widened to 7-bit two's complement `{0,k}` | 21 |
| `p(n)` | `d^k` sign-extended to 21 bits, minus X3, accumulated (ACC1) | 21 |
| `m2*p`, `m1*p` | multipliers X2, X1; `m1`, `m2` 14-bit two's complement | 35 |
| `q(n)`, `s(n)` | accumulators ACC2, ACC3 | 35 |

Each delay line is a 63-stage shift register with a 64-input multiplexer.
Tap 0 is the undelayed input, so delays of 0 to 63 samples are possible.

The samples are treated as 14-bit two's complement numbers. The differences
wrap at 14 bits. This is exact as long as two samples `k` apart differ by
less than 2^13, for example for pulses in the range 0 to 8191. All sums wrap
at their width.

For a full-scale pulse of 8000 LSB, `|p|` stays below 4.3·10^5. That fits in
21 bits. The peak of `s` is about 8·10^7, well inside 35 bits.

**Timing.** The shaper advances once per `en` strobe. The whole recursion for
a sample is computed in the clock it is presented. `s(n)` appears on `s_out`,
with `s_valid`, one clock later. This design adds no pipeline registers, so
the critical path is long: two subtractors, a mux, three multipliers and four
adders. The original prototype ran at 50 MHz on a Virtex-6. This RTL is not
claimed to meet that speed without retiming.

## Evaluating one individual

`fitness_eval` holds two circular shift registers of `N_SAMPLES` entries
(72):

- the reference input `v_ref(n)`, a copy of a typical sensor pulse;
- the golden output `s_ref(n)`, which the *reference* shaper produced for
  that input when the sensor was healthy.

An evaluation proceeds as follows.

1. The controller clears the shaper state and the error accumulator.
2. It switches the input multiplexer to `v_ref`.
3. It feeds the 72 reference samples, one per clock.
4. Each output sample is compared with `s_ref(n)`, and the accumulator adds
   `|s(n) - s_ref(n)|`. The result is the fitness

```
F2 = sum_{n=0}^{N-1} |s(n) - s_ref(n)|
```

Lower is better, and 0 means the golden response is reproduced exactly.
Because both registers rotate exactly `N` times per evaluation, they are
back at `n = 0` for the next one.

The difference is formed on 36 bits, so its absolute value fits the 35-bit
path. The 35-bit accumulator saturates rather than wraps. The 32-bit fitness
the processor reads is clipped to `2^32 - 1`, and status bit `SAT` reports
when that happened. Clipping was chosen over dropping high bits because a
wrapped error would make a very bad individual look good.

F2 was chosen over two alternatives: F1, the difference of the peak heights,
and F3 = F1 + F2. F1 reaches the right height with an asymmetric,
shifted pulse. F3 behaves like F2, but it converges more slowly and costs
more logic. Only F2 is built.

Neither the reference vectors nor the way they are loaded is fixed by the
original work. Here they are shifted in through the top's `ref_load` port,
one `(v_ref, s_ref)` pair per clock, 72 pairs. Loading is blocked while an
evaluation runs.

An evaluation takes **`N_SAMPLES + 2` clocks**, counted from the clock of the
EVAL command pulse to the clock in which the fitness register is written.
That is 74 clocks at the default size, or 1.5 µs at 50 MHz. The controller's
states are IDLE → RUN (72 clocks) → DRAIN (the last output reaches the
accumulator) → DONE (the fitness is written and the shaper is cleared).

## Working with the processor

The processor is the bus master. The evolvable shaper conducts the process:
it requests individuals and says when a generation is complete. The handshake
below is this design's own. It is built around the three registers of the
prototype, `chrom_msb`, `chrom_lsb` and `fitness`.

| address | register | access | content |
|---|---|---|---|
| 0x00 | `chrom_msb` | R/W | bits 7..0 = chromosome bits 39..32 |
| 0x04 | `chrom_lsb` | R/W | chromosome bits 31..0 |
| 0x08 | `fitness` | R | F2 of the last individual (a write gives PSLVERR) |
| 0x0C | `ctrl` | W | bit 0 EVAL, bit 1 APPLY, bit 2 START, bit 3 CHECK (each a one-clock command) |
| 0x0C | `status` | R | bit 0 REQ, bit 1 GEN_DONE, bit 2 BUSY, bit 3 SAT, bit 4 EVOLVE, bits 15..8 count |
| 0x10 | `threshold` | R/W | F2 above which a CHECK raises EVOLVE; all ones after reset (never) |

The chromosome is `{k[5:0], l[5:0], m1[13:0], m2[13:0]}`, with `k` in the
most significant bits. For example, `(31, 15, 1234, 4321)` is
`011111 001111 00010011010010 01000011100001`. `cusp_pkg::shaper_params_t`
has exactly this layout.

APB transfers have no wait states. Unmapped addresses answer PSLVERR.
Assertions in `apb_regfile` check the master's side of the protocol: PENABLE
only with PSEL, and a stable SETUP → ACCESS sequence.

One run of the GA goes like this:

1. The processor writes START. The controller clears its evaluation count and
   raises REQ, which is also the `irq` output.
2. For each individual: the processor writes `chrom_msb` and `chrom_lsb`,
   then EVAL. REQ drops and BUSY rises. 74 clocks later the fitness is in
   place and REQ rises again. After every 125th evaluation (`POP_SIZE`),
   GEN_DONE is also set. That is the signal to run the genetic operators.
3. On the processor, the four best individuals are copied into the next
   population (elitism). The other 121 come from binary tournament selection
   and one-point crossover. With the mutation probability, one random bit of
   a child is then inverted.
4. When the search ends, the processor writes the best chromosome and APPLY.
   That configuration becomes the operating one, and the shaper restarts
   from zero state.

Commands that arrive during an evaluation are ignored.

In normal operation the shaper filters `sensor_v`, one sample per
`sensor_valid`, and `s_valid` marks each output. While an evaluation borrows
the shaper (`eval_active`), sensor samples are not filtered. After the
evaluation the shaper restarts from zero state with the operating
configuration.

**Triggering a re-tuning.** The fitness evaluation also decides when the
shaper needs re-tuning. A CHECK command runs the usual 74-clock evaluation
on the *operating* configuration. It is not counted as an individual and
raises no REQ. If the resulting F2 is above `threshold`, the controller sets
EVOLVE, which also drives `irq`. The processor answers with START, which
clears EVOLVE, and runs the GA.

The shaper does not yet take its reference input from the sensor. So a CHECK
only sees a change once a new reference input, recorded from the degraded
sensor, has been loaded. The threshold and the moment to issue CHECK are up
to the software.

## What follows the original prototype and what does not

These parts follow the prototype:

- the recursion;
- the block structure of the shaper (REG1, two 63-stage delay lines, four
  adders, three multipliers, three accumulators);
- the bus widths 14, 21 and 35;
- the 7-bit `{0,k}` operand of X3;
- the 6-bit `k`/`l` and 14-bit `m1`/`m2` parameters and the 40-bit
  chromosome with its field order;
- the F2 fitness and the 32-bit fitness register;
- the registers `chrom_msb`, `chrom_lsb` and `fitness` on APB;
- a population of 125 and a reference vector of 72 samples.

These are this design's own choices:

- the single-cycle timing and the 1-clock latency;
- sample strobes;
- synchronous clears and reset;
- circular reference registers and how they are loaded;
- clipping instead of bit truncation of the fitness;
- the control/status word, the REQ/GEN_DONE/START/APPLY handshake, and the
  interrupt;
- the CHECK command and the threshold comparison that turn the fitness into
  an evolution trigger (the original states only that the fitness
  evaluation triggers the reconfiguration);
- the register addresses;
- dropping sensor samples during an evaluation.

These are not built:

- the MicroBlaze processor and its GA software;
- the APB interconnect;
- the sensor, preamplifier and ADC.

## Testbenches and what they show

Every module has a self-checking testbench in `tb/`. It prints
`TB_RESULT checks=N failures=M`.

The reference model, `tb/cusp_model_pkg.sv`, computes the recursion and F2 on
64-bit integers. It wraps each signal to the width of the bus that carries
it. All expected values come from this model.

- `tb_delay_line`: random samples, enable gaps and delay changes every clock,
  delays 0 to 63, and clear.
- `tb_cusp_shaper`: exponential pulses and random inputs on many parameter
  sets. These include the reference shapers (31,15,57,13) and (63,31,19,2),
  delays 0 and 63, negative and extreme gains, and strobes with gaps. Every
  `s(n)` is compared with the model, and the 1-clock latency is checked.
- `tb_fitness_eval`: reference loading, the `v_ref` sequence and its rewind,
  F2 against the model, and saturation and clipping.
- `tb_input_mux`, `tb_apb_regfile`, `tb_eval_controller`: the selection, the
  register map, command pulses, errors, the N+2-clock evaluation, REQ,
  GEN_DONE every `POP_SIZE`, parameter selection, and CHECK with EVOLVE
  raised only above the threshold.
- `tb_evolvable_shaper_top` runs at the default size, with
  `tb/ga_host_model.sv`, a behavioural model of the processor running the GA
  over APB. It runs a few generations from a random population. It then
  deploys the reference configuration, and a CHECK passes with F2 = 0. After
  the input is attenuated by δ = 0.8, a CHECK raises EVOLVE. A
  recalibration follows, and then operation with the result. It checks the
  following:
  - every one of about 3,600 reported fitness values against the model;
  - the evaluation time;
  - that GEN_DONE comes on every 125th evaluation;
  - that elitism never loses the best individual;
  - that the filtered sensor output matches the model;
  - that no output appears for samples that arrive during an evaluation.
- `tb_workload_recalibration` runs the GA at full size on the degradations
  below. Recalibration starts from the deployed configuration. Each case runs
  25 generations.

| case | deployed F2 | recalibrated (k,l,m1,m2) | F2 | peak error |
|---|---|---|---|---|
| δ = 0.6, ±2 LSB noise, ref (31,15,57,13) | 2.8e8 | (31,15,95,22) | 1.1e7 | 0.9 % |
| τ 200 → 140 µs, ref (63,31,19,2) | 5.0e8 | (63,31,18,3) | 1.3e8 | 4.6 % |
| A 20 → 14 V | 5.3e8 | (63,31,27,3) | 8.5e7 | 2.7 % |
| both | 8.7e8 | (63,31,26,4) | 1.2e6 | 0.05 % |

With an attenuated pulse the GA raises the gains and keeps the delays, as
expected. For δ = 0.6 the published recalibration of the real-data event was
(31,15,89,20). The test pulse here is a synthetic exponential, not that
event, so the numbers are close but not identical.

Evolution from a fully random population was not reproduced. With this GA
model and the fitness on this scale, the search tends to settle on `k = 0`.
That configuration gives a zero output, and its F2 equals the energy of the
golden response. The end-to-end test therefore evolves from scratch for only
a few generations. It seeds the reference configuration into the population
and checks that F2 = 0 is found and kept.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/cusp_pkg.sv tb/cusp_model_pkg.sv tb/tb_evolvable_shaper_top.sv \
    --top-module tb_evolvable_shaper_top
./obj_dir/Vtb_evolvable_shaper_top
```

Replace the testbench name to run any other. All of them finish in seconds.
The simulator has two states and no X. Everything that is read is reset or
loaded before use. The reference registers have no reset and must be loaded.

## Changing it

- `N_SAMPLES` (top, `fitness_eval`, `eval_controller`) sets the length of the
  reference vectors.
- `POP_SIZE` sets the number of evaluations per generation. The count is 8
  bits, so at most 255.
- `MAXD` of `cusp_shaper` sets the longest delay. The select stays 6 bits,
  so more than 63 needs wider `k`/`l` fields.
- The bus widths are in `cusp_pkg`. Changing them changes the chromosome
  layout and the register map.
