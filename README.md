# A pipelined, truncated CIC decimation filter for a sigma-delta audio ADC

An oversampled sigma-delta modulator produces a coarse word at a very high
rate. In this design it is a 5-bit two's complement word at 6.144 MHz, which
is 128 times the 48 kHz audio rate. To turn that into audio samples, a
decimation chain has to remove the out-of-band quantisation noise and lower
the rate. The first and fastest stage of that chain is a
cascaded-integrator-comb (CIC) filter. It has the transfer function

    H(z) = ( (1 - z^-RM) / (1 - z^-1) )^N ,   N = 5, R = 16, M = 1

and it needs no multipliers. It is built from N integrators running at the
input rate, a down-sampler that keeps one sample in R, and N combs
(first differences) running at the output rate. The filter decimates
6.144 MHz to 384 kHz. Later half-band and droop-correction FIR stages would
take 384 kHz down to 48 kHz; they are not part of this RTL.

The RTL here is the CIC filter alone, built for speed:

* Every integrator is a register fed by a carry look-ahead adder (the MCLA,
  described below). The integrator's feedback register is also its pipeline
  register, so the critical path is one adder.
* The combs are ripple-carry subtractors with a register after each one.
* Integrator word widths are cut down stage by stage (Hogenauer
  truncation). This saves area and shortens the later adders.

## Data path and word widths

```
CIC_in[4:0] -> adjuster -> I1 -> I2 -> I3 -> I4 -> I5 -> down-sampler -> C1 -> ... -> C5 -> CIC_out[15:0]
              5->25 bit   25    22    20    18    16      keep 1 of 16     16 bit each
```

The gain of the filter at DC is (RM)^N = 16^5 = 2^20. A 5-bit input
therefore needs 5 + 20 = 25 bits for the result to be exact. The integrators
wrap around many times, but two's complement arithmetic modulo 2^25 makes the
comb differences come out right.

| stage            | width | bits dropped at its input | clocked                 |
|------------------|-------|---------------------------|-------------------------|
| adjuster         | 25    | –                         | on `load`               |
| integrator 1     | 25    | 0                         | on `load`               |
| integrator 2     | 22    | 3                         | on `load`               |
| integrator 3     | 20    | 2 (5 in total)            | on `load`               |
| integrator 4     | 18    | 2 (7)                     | on `load`               |
| integrator 5     | 16    | 2 (9)                     | on `load`               |
| down-sampler     | 16    | –                         | on `load`, keeps 1 in 16 |
| combs 1..5       | 16    | –                         | on the down-sampler strobe |

Each stage throws away least significant bits of its input: it keeps the top
W bits of the previous stage's word. This is plain truncation, i.e. rounding
toward −∞, not rounding to nearest.

The combs are not truncated. Dropping bits after the down-sampler would cost
too much signal-to-noise ratio. So every comb has the 16-bit width of the last
integrator.

The 16-bit output is the exact 25-bit result divided by 2^9, plus a small
error from the truncation. The testbench measures this error:

* On a sigma-delta stream it stays below about 330 LSB. Most of that is the
  start-up transient.
* On a settled DC input it stays below 32 LSB.

### Full-scale caveat

A 5-bit input of −16 held as DC gives an exact result of −16 · 2^20 = −2^24.
After dropping 9 bits that is −32768, the most negative 16-bit code.
Truncation errors are negative, so they push the output past that code and
it wraps to a large positive value. DC inputs from −15 to +15 settle
correctly. A modulator that never holds its most negative code for long does
not hit this. If that cannot be guaranteed, use the untruncated build
(`TRUNCATE = 0`) or saturate upstream.

## The MCLA adder (`mcla`)

The integrator adders are 25-bit modified carry look-ahead adders. The idea
is a compromise between ripple carry, which is slow, and a full look-ahead
carry, whose terms grow exponentially with width:

* **Inside each 4-bit group** every carry is one two-level sum of products
  of the bit generate `g = a·b` and propagate `p = a + b` terms and the
  group's carry-in:

  ```
  c1 = g0 + p0·c0
  c2 = g1 + p1·g0 + p1·p0·c0
  c3 = ...
  c4 = ...
  ```

* **Each group also gives** a group propagate `P = p3·p2·p1·p0` and a group
  generate `G = g3 + p3·g2 + p3·p2·g1 + p3·p2·p1·g0`.
* **Between groups** the carry is `G + P·c0`. The groups are chained through
  one AND-OR each, so a 25-bit word takes six 4-bit groups plus a final
  1-bit group.

The bit cells come in three types:

| cell | where          | outputs     | why                                   |
|------|----------------|-------------|---------------------------------------|
| HA   | bit 0          | s, g        | there is no carry-in                  |
| PFA  | bits 1..W−2    | s, g, p     | does not compute its own carry-out    |
| SPFA | the MSB        | sum only    | its carry and propagate are never used |

The adder has no carry-in and no carry-out. The integrator accumulates
modulo 2^W and needs neither.

## The RCAS subtractor (`rcas`)

The comb's adder-subtractor is a ripple-carry adder:

* its B operand is XORed with a `sub` control;
* `sub` is also its carry-in, so `a − b = a + ~b + 1` when `sub` is 1.

The combs tie `sub` to 1. The published chip symbol shows this control as a
pin; here it is internal.

## Timing and interface (`cic_filter`)

| port          | dir | width | meaning                                          |
|---------------|-----|-------|--------------------------------------------------|
| `clk`         | in  | 1     | clock                                            |
| `rst`         | in  | 1     | synchronous, active-high reset of every register |
| `load`        | in  | 1     | `CIC_in` holds a new sample on this clock        |
| `CIC_in`      | in  | 5     | two's complement modulator output                |
| `CIC_out`     | out | 16 (25 if `TRUNCATE=0`) | decimated output, held between updates |
| `cic_rdy`     | out | 1     | one-clock pulse: `CIC_out` has just been updated |
| `test_mode`   | in  | 2     | `CIC_MODE_NORMAL` for filtering; test modes below |

**Input side.** One sample is taken per clock edge with `load` high.

* At 6.144 MHz with `load` tied high, the filter runs one sample per clock.
* A slower or bursty source can drop `load` between samples. The whole
  high-rate section holds its state while `load` is low.

**Down-sampler.** It counts loaded samples with a 4-bit down counter.

* It is reset to 0 and keeps the sample it sees at 0, then reloads with 15.
* So after a reset the 1st, 17th, 33rd ... loaded samples are kept.

**Comb side.** There is a single clock domain; no divided clock is made.

* The down-sampler emits a one-clock strobe.
* The strobe walks down the five comb registers with the data.
* At the end of the chain it appears as `cic_rdy`.

**Latency:**

* `CIC_out` changes, and `cic_rdy` pulses, 6 clocks after the load edge of
  each kept sample: 1 down-sampler register plus 5 comb registers.
* The kept integrator value lags the input by another 6 loaded samples:
  the adjuster plus 5 integrators.
* Counting from reset, output m (m = 0, 1, ...) is therefore the filter's
  response to the input sequence up to sample 16·m − 6.

After reset, the first outputs show the filter's start-up transient. It has
5 comb delays, so the output is steady from the 6th output on.

## Test configuration (`cic_test_mux`)

Three multiplexers let each section be exercised on its own from the
filter's pins:

* the down-sampler's input;
* the comb cascade's input and its strobe;
* the output.

`test_mode` (type `cic_pkg::cic_mode_e`) selects:

| mode                   | data path                                 | `CIC_out`, `cic_rdy`                    |
|------------------------|-------------------------------------------|-----------------------------------------|
| `CIC_MODE_NORMAL`      | integrators → down-sampler → combs        | filter output, 6 clocks after a kept load |
| `CIC_MODE_INTEGRATOR`  | integrators                               | integrator cascade, one clock after every load |
| `CIC_MODE_DOWNSAMPLER` | adjusted input → down-sampler             | every 16th input sample                 |
| `CIC_MODE_COMB`        | adjusted input → combs, stepped on every load | fifth difference of the input        |

The sections that are not observed keep running. Change `test_mode` while
`rst` is high, so that every stage starts from zero in the new mode.

In the integrator mode the output grows without bound and wraps. That is
the expected behaviour of an integrator. The mux positions and the 2-bit
encoding are this design's own; the original's six control signals are not
described consistently enough to copy.

## Parameters

All live on `cic_filter`; their defaults come from `cic_pkg`.

| parameter  | default | meaning |
|------------|---------|---------|
| `N`        | 5       | number of integrator and comb stages |
| `R`        | 16      | decimation ratio |
| `M`        | 1       | differential delay of the combs |
| `B_IN`     | 5       | input width |
| `B_MAX`    | 25      | full-precision width, normally `B_IN + N·log2(R·M)` |
| `TRUNCATE` | 1       | 1: 25/22/20/18/16 integrators and 16-bit combs/output. 0: every stage 25 bits and a 25-bit output |

The truncation table in `cic_pkg` (`TRUNC_DROP`) is worked out for N = 5 and
a 25-bit maximum width. A different N or R with `TRUNCATE = 1` needs a new
table; the integrator cascade stops elaboration if N > 5 with truncation on.

For the untruncated build, `B_MAX` must be at least `B_IN + N·log2(R·M)`.
Then the output is exact.

## Where this design departs from the published filter

* **Single clock.** The comb section runs on a clock enable (the
  down-sampler's strobe), not on a clock divided down by the down-sampler.
* **`cic_rdy` and `test_mode`.** These pins are added. `cic_rdy` marks new
  output words; `test_mode` selects the test configuration. The published
  filter's top level has only `clk`, `load`, `rst`, `CIC_in` and `CIC_out`.
* **Reset and `load`.** The source gives their names only:
  * reset is synchronous and active high;
  * `load` is read as a per-sample enable for the whole high-rate section.
* **Adjuster.** It registers the input and sign-extends it. The input is
  taken to be two's complement already.
* **Down counter.** The down-sampler counts down. Descriptions of the
  original differ between an up and a down counter; the samples kept are
  the same either way.
* **Output width.** It is 16 bits by default, as in the truncated high-speed
  filter. The 25-bit output of the FPGA version and the chip symbol is
  available as `TRUNCATE = 0`. In that mode the comb `sub` control is
  internal, not a pin.
* **MCLA cell logic.** The cells use the OR form of the propagate term,
  `p = a + b`. The XOR form would give the same sums.
* **Latency.** 6 clocks plus 6 samples here. A 23-cycle output latency
  reported for an FPGA realisation of the original could not be reproduced
  from its description and is not modelled.
* **Test modes.** The test configuration uses a 2-bit mode of its own in
  place of the original's six control lines.
* **Not included:**
  * I/O pads;
  * the rest of the decimation chain: the two half-band filters and the
    droop-correction FIR.

## Simulation

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=.. failures=..` and stops itself with a watchdog if
something hangs. With plain Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/cic_pkg.sv tb/sdm3_pkg.sv rtl/*.sv tb/tb_cic_filter.sv \
    --top-module tb_cic_filter -o sim
./obj_dir/sim
```

Substitute any other testbench for `tb_cic_filter`.

| testbench              | what it checks |
|------------------------|----------------|
| `tb_mcla`              | carry-chain corner cases and random sums at 6, 8 and 25 bits |
| `tb_rcas`              | random add and subtract |
| `tb_cic_adjuster`      | sign extension, load gating, reset |
| `tb_cic_integrator`    | one stage with and without truncation |
| `tb_cic_integrators`   | the 5-stage cascade against an integer model |
| `tb_cic_downsampler`   | which samples are kept, strobe spacing, reset |
| `tb_cic_comb`          | one comb, M = 1 and M = 2 |
| `tb_cic_combs`         | the 5-comb cascade |
| `tb_cic_test_mux`      | the routing table of the four test modes |
| `tb_cic_filter`        | the default filter end to end (see below) |
| `tb_cic_filter_exact`  | the 25-bit untruncated build (see below) |

`tb_cic_filter` runs the default filter end to end:

* It drives the filter with a third-order sigma-delta model (`sdm3_pkg`)
  fed a sine, with `load` both held high and with random gaps.
* It also drives random codes, DC levels and a reset in mid-stream.
* It then runs each of the three test modes, checked against the same
  model with the matching routing.
* Every output word is compared with a bit-true integer model of the
  truncated data path, and the `cic_rdy` timing is checked.
* The output must track the exact response to within 1024 LSB, and DC
  must settle to within 32 LSB.
* It counts outputs, stalls, integrator wrap-arounds, non-zero truncations,
  resets, DC settles and outputs in each test mode. Each count must be
  non-zero.

`tb_cic_filter_exact` tests the 25-bit untruncated build:

* Its output is compared bit-exact with direct convolution against the
  76-tap impulse response of the CIC, i.e. the coefficients of
  `(1 + z^-1 + ... + z^-15)^5`, which sum to 2^20.
* It includes the full-scale −16 DC case.
