# Stochastic Bayesian inference with MTJ bitstream generators

Bayesian inference multiplies and adds probabilities. In stochastic computing a probability *p*
is a stream of bits in which each bit is 1 with probability *p*. A two-input AND gate then
multiplies two independent streams, and a two-input multiplexer whose select is a stream of
value *s* forms the weighted sum *s·a + (1−s)·b*. The arithmetic costs almost nothing. The costly
part is making many good, mutually independent streams. A CMOS generator needs a pseudo-random
number generator and a comparator for each stream.

This design makes the streams with magnetic tunnel junctions (MTJs) instead. An MTJ switches
from its high-resistance state (AP) to its low-resistance state (P) only with some probability.
That probability is set by the voltage of the write pulse. Each stream bit comes from one
sequence:

1. Reset the junction to AP.
2. Write it with the bias that encodes *p*.
3. Read it with a sense amplifier: P reads as 1, AP as 0.

One such circuit is a stochastic bitstream generator (SBG). SBGs feed a network of AND gates
and multiplexers. Counters then turn the result streams back into numbers.

The RTL contains two inference systems built this way, side by side in the top module `bis_top`:

* **Target location (data fusion).** Three sensors report a distance and a bearing to a target.
  The posterior over a 64 × 64 grid of positions is computed, with one independent row of
  hardware per position: 24,576 SBGs, 20,480 AND gates and 4,096 counters.
* **Belief network.** A five-node heart-disease network (exercise, diet → heart disease →
  blood pressure, chest pain). It answers posterior queries by setting the multiplexer
  selects: 11 SBGs, 3 AND gates, 8 multiplexers and 3 counters.

## 1. The SBG and its timing

### The cell (`sbg_cell`, `mtj_model`)

The cell has two halves around the junction.

**Write driver**

* MUX1, selected by `Wrt. 1`, connects the bit line BL to the top of the junction. BL carries
  the write bias.
* MUX4, selected by `Rst. 0`, connects the source line SL to the bottom. SL carries the reset
  bias.
* An unselected side goes to ground.

**Read circuit**

* A pre-charge sense amplifier (PCSA) sits on top of the junction.
* Transistor N1, gated by `Read En`, connects the bottom of the junction to ground.

**Path selection**

MUX2 and MUX3, selected by `Write En`, connect the junction to one half or the other. This
gives three operations:

| Write En | Rst. 0 | Wrt. 1 | Read En | effect |
|---|---|---|---|---|
| 1 | 1 | 0 | 0 | current bottom→top: junction set to AP (always succeeds) |
| 1 | 0 | 1 | 0 | current top→bottom: AP→P with the probability of the write bias |
| 0 | 0 | 0 | 1 | PCSA reads the junction: P → 1, AP → 0 |

The cell is a **behavioural model**. The junction and the sense amplifier are analog parts.
`mtj_model` models thermal switching as one draw per write pulse from a private xorshift32
generator:

* The junction switches if the top `PROB_W` bits of the draw are below the bias code.
* A write current held for several clocks draws only once.
* Each junction's generator starts from its own seed. The seed is a splitmix32 hash of a device
  index that is unique on the chip. This keeps streams uncorrelated, as the AND-gate product
  requires.

The model does not reproduce the shape of the device's voltage-to-probability curve. That curve
is measured, not tabulated: a monotone S-curve from about 1.13 V (p ≈ 0) to 1.36 V (p ≈ 1) for a
5 ns write. Therefore:

* **Every bias input in the RTL is a probability code.** A `prob_t` holds a value from 0 to
  `PROB_ONE` = 2^10, which stands for probability 1.0.
* Converting a likelihood into a real voltage happens outside this RTL, through the device's
  calibration curve.

### One bit = 40 ticks (`sbg_phase_ctrl`)

One sequencer drives the four phase signals of every SBG in a system. At a 1 ns tick, the
default schedule per bit is:

```
tick  0..9   RESET  Write En, Rst. 0       (10 ns: guarantees the AP reset)
tick 10..14  gap
tick 15..19  WRITE  Write En, Wrt. 1       (5 ns: P-V relation close to linear)
tick 20..24  gap
tick 25..34  READ   Read En                (PCSA output registered every tick)
tick 35..39  gap    bit_valid in tick 35   (all readouts hold the new bit)
```

* **Latency.** A T-bit inference takes 40·T ticks, so 10.24 µs for T = 256. Every SBG works in
  parallel, so this holds for any grid size.
* **Published timings.** The 10 ns reset, the 5 ns write and the 40T ns total are published
  figures.
* **This design's choices.** The split of the remaining 25 ns into three gaps and a 10 ns read
  is this design's, as are the four tick counts kept as parameters.

**Handshake.** `start` is sampled on a clock edge, together with the length `len` (T, from 1 to
`MAX_LEN` = 256). In the cycle after that edge, `clear` zeroes the counters and the first reset
tick runs. `done` goes high 40·T cycles after that first cycle.

The gates after the SBGs are combinational on the registered sense-amplifier outputs, so every
result stream is valid at `bit_valid`. The AND operations happen "during the read", as intended.

## 2. Target location (`df_row`, `df_system`)

### The problem

* Sensors sit at (0,0), (0,32) and (32,0). Each reports a distance *D* and a bearing *B* to a
  target at (28,29).
* For a candidate position (x, y), each reading has a Gaussian likelihood:
  * distance: mean = the true distance from the sensor to (x, y), σ = 5 + mean/10;
  * bearing: mean = the true angle from the sensor to (x, y), σ = 14.0626°.
* The prior is uniform. So the posterior of a position is, up to a constant, the product of its
  six likelihoods.

### The hardware

Positions are independent of each other. Each position gets one `df_row`:

* six SBGs, biased with the six likelihoods in the order D1 B1 D2 B2 D3 B3;
* a chain of five AND gates, giving `o = sb0 & sb1 & … & sb5`.

`df_system` holds GRID × GRID rows (row r = y·GRID + x), one shared sequencer, and one 9-bit
`sc_counter` per row.

### Reading the result

After `done`, the posterior distribution is `count[r] / Σ count`. The normalisation, and the
mapping of likelihoods into codes, are left to the reader.

Likelihood values must be scaled into [0, 1]. Any constant factor per likelihood cancels in the
normalisation, but a factor that varies with position does not. For example, the 1/σ of the
distance Gaussian varies with distance and must be kept. The testbench workload package
(`tb/df_workload_pkg.sv`) does exactly this:

* It scales the distance likelihood by 5·√(2π).
* It scales the bearing likelihood by its peak.
* The extent of the plane is not part of the design. The tests take it as the square
  0…32 × 0…32, each cell represented by its centre.

Small likelihoods quantise to code 0, so far-away cells read exactly 0. With 10-bit codes, a
row's product resolves values down to about 2⁻¹⁰ per factor. The bitstream length limits
resolution much more than that: one count is 1/T.

## 3. Heart-disease belief network (`bbn_hd_prior`, `bbn_hd_posterior`, `bbn_system`)

Network and conditional probability tables (CPTs):

| node | CPT |
|---|---|
| Exercise E | p(E=Y) = 0.7 |
| Diet D | p(D=Y) = 0.25 |
| HD given (E,D) | YY 0.25, YN 0.45, NY 0.55, NN 0.75 |
| BP given HD | p(BP=Y \| HD=Y) = 0.85, p(BP=Y \| HD=N) = 0.2 |
| CP given HD | p(CP=Y \| HD=Y) = 0.74, p(CP=Y \| HD=N) = 0.3 |

The circuit answers queries in two steps.

**Step 1: the prior of HD.** `bbn_hd_prior` computes

p(HD=Y) = [p(HD|Y,Y)·d + p(HD|Y,N)·(1−d)]·e + [p(HD|N,Y)·d + p(HD|N,N)·(1−d)]·(1−e)

It uses three multiplexers:

* Two first-level multiplexers select between the CPT streams of one E value. Their select
  streams have value *d* = p(D=Y). Each has its own SBG, so the two selects are independent.
* The output multiplexer selects between the two results with a stream of value *e* = p(E=Y).

When D or E is observed, its select bias is set to 1 (yes) or 0 (no) instead of the prior.

**Step 2: conditioning on symptoms.** `bbn_hd_posterior` conditions on the symptoms:

* Each symptom CPT stream passes a multiplexer whose other input is a constant 1. The evidence
  bit `ev_bp` (ctrl3) or `ev_cp` (ctrl4) chooses between them. An unobserved symptom therefore
  contributes a factor of 1.
* Two AND gates form the likelihoods L_Y and L_N.
* A third AND gate forms the numerator `p(HD)·L_Y`.
* A fifth multiplexer, selected by the p(HD) stream, forms the denominator
  `p(HD)·L_Y + (1−p(HD))·L_N`.

Numerator and denominator share the same p(HD) and L_Y streams. So every 1 of the numerator is
also a 1 of the denominator, and

    p(HD=Y | evidence) ≈ cnt_mol / cnt_den          p(HD=Y | E, D) ≈ cnt_hd / T

**There is no divider in the circuit.** The two counts are outputs and the reader divides them.
To condition on a symptom observed *absent*, set its CPT biases to 1 − p and its evidence bit to
1.

Settings for the published example queries (ctrl1 = D select bias, ctrl2 = E select bias,
ctrl3/ctrl4 = evidence bits). The first six columns are the query and its settings. "Exact"
comes from the CPTs above. The last two columns are one run of `tb_bis_top` at T = 256:

| query | ctrl1 | ctrl2 | ctrl3 | ctrl4 | exact | cnt_mol / cnt_den |
|---|---|---|---|---|---|---|
| p(HD\|BP) | 0.25 | 0.7 | 1 | 0 | 0.803 | 0.790 |
| p(HD\|D,E,BP) | 1 | 1 | 1 | 0 | 0.586 | 0.613 |
| p(HD\|E,BP) | 0.25 | 1 | 1 | 0 | 0.739 | 0.758 |
| p(HD\|D,E,BP,CP) | 1 | 1 | 1 | 1 | 0.778 | 0.755 |
| p(HD\|CP) | 0.25 | 0.7 | 0 | 1 | 0.703 | 0.705 |

At T = 256 the denominator holds only 50 to 130 ones. The ratio therefore scatters by a few
hundredths from run to run. This is the usual stochastic-computing trade of length for accuracy.

## 4. Top level (`bis_top`)

The two systems share only `clk` and `rst_n`. Each has its own `*_start`, `*_len`, `*_busy` and
`*_done`.

**Inputs**

* `df_vbias[4096][6]`: the grid's likelihood codes.
* `bbn_cpt_hd[4]`, `bbn_cpt_sym[4]`: the network's CPT codes.
* `bbn_ctrl1_bias`, `bbn_ctrl2_bias`: the select biases.
* `bbn_ev_bp`, `bbn_ev_cp`: the evidence bits.

In silicon, each code is an analog bias line into one SBG.

**Outputs**

* `df_count[4096]`, `bbn_cnt_hd`, `bbn_cnt_mol`, `bbn_cnt_den`: all valid while `*_done` is
  high.

Seeds: grid SBG *k* of row *r* is device 6r + k. The network's SBGs follow, starting at 6·4096.

**What is synthesizable**

* Synthesizable: the sequencer, the counters, the AND/multiplexer networks and the wiring.
* Behavioural: `sbg_cell` and `mtj_model`. They use `initial` blocks and a per-device random
  generator in place of device physics.
* Not modelled, because they are analog: the BL/SL bias voltage sources and the conversion from
  evidence to voltage.

## 5. Departures, choices and open points

Where the published description is inconsistent, this RTL takes the following choices:

* **Prior in the grid rows.** The published row diagram also draws a prior input ANDed into
  each row. The text counts 6 SBGs and 5 AND gates per position and drops the uniform prior.
  The RTL follows the count. A non-uniform prior would need a seventh SBG per row.
* **p(E=Y).** p(E=Y) is given as 0.7 in the network's table but as 0.75 for the ctrl2 select
  in the example settings. The published exact results match 0.7, so the tests use 0.7. The
  value is an input in any case.
* **The p(HD | E, BP) query.** For this query, the network equations give 0.739 with the CPTs
  above, but 0.687 is published. The circuit implements the equations.
* **Signal name.** The reset-phase signal appears as both "Rst. 0" and "Rst. 1". The RTL uses
  `rst0`.

Choices that are this design's own:

* the bias code resolution (`PROB_W` = 10);
* the gap and read lengths;
* the handshake (`start`/`len`/`busy`/`done`/`clear`);
* counter width and saturation;
* the PCSA output held between reads (a real PCSA pre-charges);
* one sequencer per system;
* the random-number generator inside the device model;
* the order of likelihoods in a row.

Evaluated points the design does not cover:

* **Bitstream length.** Results quoted for a length of 1000 exceed `MAX_LEN` = 256. Raise
  `MAX_LEN` to run them.
* **Energy and analog accuracy.** These are properties of the analog device and cannot come
  from this RTL.

## 6. Verification

Each block has a self-checking testbench in `tb/`. Each prints `TB_RESULT checks=N failures=M`
and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_mtj_model` | p = 0 never switches, p = 1 always switches, reset always AP; switching rate within 4σ at p = 0.1, 0.5, 0.75; two seeds give different, uncorrelated sequences; a held write draws once |
| `tb_sbg_cell` | reset/write/read by hand; no write or reset without Write En; readout changes only in the read phase; switching rate at p = 0.3 |
| `tb_sbg_phase_ctrl` | the phase signals tick by tick against a reference schedule; bit_valid position; latency 40·T; a start while busy is ignored; len = 0 |
| `tb_sc_counter` | random streams with gaps; clear; saturation |
| `tb_df_row` | row output = AND of the six streams at every bit; each stream's rate; independence of two streams; the product |
| `tb_df_system` | 4 × 4 grid: each count against the product of its biases and against an AND count kept in the testbench; certain and impossible rows; clearing between runs; latency |
| `tb_bbn_hd_prior` | the multiplexer tree at every bit; p(HD) for prior and observed E/D |
| `tb_bbn_hd_posterior` | the AND/multiplexer network at every bit; posterior for all four evidence settings |
| `tb_bbn_system` | the five example queries at T = 256: latency and counts within 4σ of exact |
| `tb_bis_top` | 16 × 16 grid with the sensor workload at T = 64, 128, 256, running at the same time as the network queries. The most probable cell must be within one cell of the target, and KL(sc ‖ exact) must stay below 0.30 / 0.20 / 0.12. It counts write failures and successes, each length, prior and observed selects, each evidence value, and both systems running at once. |
| `tb_bis_top_full` | default parameters (64 × 64, 24,576 SBGs), T = 256, with one network query alongside |

For `tb_bis_top`, the measured KL(sc ‖ exact) was 0.115, 0.059 and 0.032 for T = 64, 128 and
256. Here KL(sc ‖ exact) is the Kullback-Leibler divergence of the normalised counts from the
exact posterior of the quantised biases. The most probable cell was (13,13) or (13,15) against
target cell (14,14). The error falls with T, as expected.

At full size (`tb_bis_top_full`, 64 × 64, T = 256), the most probable cell centre was
(26.25, 28.75) for a target at (28, 29), and KL(sc ‖ exact) was 0.031. The network query run
alongside gave p(HD|BP) = 0.864 against 0.803 exact; its counts were within the 4σ bound.

These values are larger than those published for the analog circuit. Two reasons:

* The plane extent and the divergence direction here are this testbench's own choices.
* The generator here is a simple per-device PRNG.

The sequencer and the gate networks are checked exactly, bit by bit. Whatever depends on random
streams is checked statistically, with fixed seeds. So every run is reproducible.

## 7. Simulating and changing it

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
  rtl/bis_pkg.sv tb/df_workload_pkg.sv tb/tb_bis_top.sv --top-module tb_bis_top
./obj_dir/Vtb_bis_top
```

Any other testbench works the same way; give its file and `--top-module`.

Build times:

* The 16 × 16 end-to-end test builds and runs in under a minute.
* The full 64 × 64 test instantiates 24,576 cell models. Verilator turns these into a large
  amount of C++. Building it took about 8 minutes with two compile jobs (`-j 2`); the
  simulation itself then ran in about 20 seconds.

Parameters:

* `GRID`: positions per side.
* `MAX_LEN`: longest bitstream; sets the counter width.
* `RESET_TICKS`, `WRITE_TICKS`, `READ_TICKS`, `GAP_TICKS`: the phase lengths.
* `PROB_W` in `bis_pkg`: the bias resolution.

The block-level testbenches shorten the phases to 2/1/2/1 ticks to save simulation time; the
logic does not depend on the lengths.
