# UNBIAS PUF in SystemVerilog

A strong physical unclonable function (PUF) returns a response bit for each
challenge, and the bit depends on tiny manufacturing differences between chips.
The classic delay-based strong PUF is the arbiter PUF. It races two signals
through two paths and uses a flip-flop to decide which arrives first. That only
works if the two paths are laid out perfectly symmetric. If they are not, a routing
bias decides the race on every chip the same way, and the PUF stops being unique.
A close race can also leave the arbiter metastable.

The UNBIAS PUF avoids both problems, and it can be written entirely as ordinary
RTL:

* **It measures the race instead of judging it.** Each path is stretched to
  milliseconds by ring oscillators and counters. A counter clocked by the system
  clock measures when each signal arrives, and the difference of the two arrival
  times is kept as a signed number. No flip-flop has to decide a close race.
* **The response is a middle bit of that difference, not its sign.** Without
  layout constraints, the difference for a given challenge has a bias that is the
  same on every chip. Its sign therefore says little about the chip. Bit *i* of
  the difference alternates between 0 and 1 every 2^*i* clock cycles. When 2^*i*
  is small against the chip-to-chip spread, each chip lands on a 0 or a 1 with
  about equal chance, whatever the bias. When 2^*i* is large against the
  measurement noise, one chip keeps giving the same answer. This bit is the
  *inspection bit*. It is chosen once for a design and is public.

This repository has the RTL of the PUF, a behavioural model of its ring
oscillators that makes whole chips simulatable, and self-checking testbenches.
One testbench repeats the uniqueness/reliability experiment on seven simulated
chips.

## Structure

```
           +-----------------------------------------------------------> START a
           |      stage 0               stage 1            stage 9
 Trigger --+--[RO+RO counter]--+-----[RO+RO counter]--+ ... --+-----> STOP a --> clock counter a --+
           |                   | X c[0]               | X c[1]  | X c[9]                           (-)--> diff reg --> response
           +--[RO+RO counter]--+-----[RO+RO counter]--+ ... --+-----> STOP b --> clock counter b --+        bit insp_bit
           |                                                                        ^  CLK (50 MHz)
           +-----------------------------------------------------------> START b
```

| Module | Role |
|---|---|
| `unbias_puf` | Top level. Wires everything as above and holds the 20 oscillators. |
| `unbias_ro` | Behavioural model of a 19-inverter ring oscillator (not synthesizable). |
| `unbias_ro_counter` | Holds the race signal back for `RO_THRESHOLD` oscillations of its oscillator. |
| `unbias_path_switch` | 2x2 switch, set by one challenge bit: straight (0) or crossed (1). |
| `unbias_clock_counter` | Counts system-clock cycles from START (Trigger) to STOP (race signal). |
| `unbias_diff_reg` | Stores `cnt_a - cnt_b` (19-bit two's complement); response = bit `insp_bit`. |
| `unbias_ctrl` | Sequencer: latch challenge, clear, raise Trigger, wait for both STOPs, capture. |
| `unbias_sync` | Two-flop synchroniser, used wherever a race signal enters a clock domain. |
| `unbias_pkg` | Sizes, controller state type, hash function of the oscillator model. |

Default sizes are those of the FPGA build: 10 stages (so a 10-bit challenge), a
release after 50,000 oscillations, 19-inverter oscillators, a 19-bit difference
register, a 50 MHz clock, and inspection bit 10.

## How a race becomes a number

**Delay stages.** Both race signals leave the Trigger together. A stage on each
path is a free-running ring oscillator and an `unbias_ro_counter` clocked by it.
When the race signal reaches the counter, it synchronises the signal into the
oscillator's domain with two flops. It then counts oscillations, and raises its
output on the 50,000th. Its output rises exactly `SYNC_STAGES + THRESHOLD` rising
oscillator edges after its input, give or take one edge of phase. A stage is
therefore a delay of about 50,000 oscillator periods, about 0.76 ms with the model's
66 MHz oscillators. A 0.1 % difference in oscillator frequency becomes 0.76 µs, which
is 38 clock cycles. This amplification is why no symmetric layout is needed: wire
delays of nanoseconds are small against it.

**Path configuration.** After each pair of stages, a switch set by challenge bit
*k* either keeps both signals on their rows or swaps them. Bit 0 sets the first
switch and bit 9 the last one, in front of the clock counters. Different
challenges send each signal through a different set of oscillators.

**Clock counters.** Counters `a` (upper path) and `b` (lower path) both start when
the Trigger arrives at START, through a two-flop synchroniser. Each stops when its
race signal arrives at STOP, through an identical synchroniser. Both are clocked by
the system clock. The synchroniser latencies are equal, so they cancel. A race
lasts about 377,000 cycles with the default model.

**Difference and response.** `unbias_diff_reg` loads `cnt_a - cnt_b` modulo 2^19.
The counters are 19 bits wide and may wrap, because only the difference modulo 2^19
is used. That difference is exact as long as the true difference lies within
±2^18 cycles. The response is `diff[insp_bit]`. An index beyond the MSB selects
the MSB. `diff` itself is also an output, because choosing the inspection bit
needs raw differences (see below).

## Using the top level

```
clk, rst_n                system clock (50 MHz on the FPGA build), asynchronous reset
start, challenge[9:0]     pulse start for one cycle while busy is low
insp_bit[4:0]             public inspection bit; acts on the held difference at any time
busy                      high during a measurement; start is ignored meanwhile
resp_valid                one-cycle pulse when response and diff are valid; both hold until the next start
response, diff[18:0]      response bit and signed difference (upper minus lower arrival, in cycles)
```

The controller goes through IDLE, CLEAR, RUN, CAPTURE and DONE. CLEAR takes 4
cycles. In it, all RO counters are held in asynchronous reset, the clock counters
are cleared and Trigger is low. In RUN, Trigger is high until the later STOP has
been synchronised. CAPTURE follows on the next cycle, and `resp_valid` on the cycle
after that. A measurement therefore takes about 4 + 377,000 + 5 cycles, about
7.6 ms. 120 challenges take about 0.9 s. Two assertions in `unbias_ctrl` check the
handshake: capture happens only after both STOPs, and Trigger stays high during
the race.

## Choosing the inspection bit (done off-chip)

The inspection bit is chosen once per design, from measurements of a single chip
and an estimate of the chip-to-chip spread σ. The chip only needs `insp_bit` and
the `diff` output. The procedure:

1. Measure each of a set of challenges *t* times. For candidate bit *i*, let
   n_one and n_zero be how many of the *t* responses are 1 and 0. The predicted
   intra-chip fractional Hamming distance (intra-FHD) of the challenge is
   `n_one * n_zero / C(t,2)`, the fraction of measurement pairs that disagree.
   Average it over the challenges. Keep the bits whose intra-FHD meets the error
   budget of the error-correcting code.
2. Assume the difference values of one challenge across chips are normal with
   standard deviation σ. For bin width w = 2^*i*, the inter-chip FHD is lowest
   when the mean falls in the middle of a bin. Let A1 be the fraction of that
   normal distribution that falls in 1-bins, and A0 = 1 - A1. Let R = A1 / A0.
   The lower bound of the inter-FHD is `2R / (1+R)^2`. Among the bits kept in
   step 1, pick the one with the best bound.

On the FPGA build this gave bit 10, with σ = 521 cycles.

## Simulating

The testbenches use only plain Verilator 5 with timing support. For example:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
          rtl/unbias_pkg.sv tb/tb_unbias_puf.sv --top-module tb_unbias_puf
./obj_dir/Vtb_unbias_puf
```

Each testbench prints `TB_RESULT checks=N failures=M`.

| Testbench | What it shows | Run time |
|---|---|---|
| `tb_unbias_ro_counter` | Release after exactly 2 + 50,000 edges; the counter holds; reset clears it | < 1 s |
| `tb_unbias_path_switch` | All 8 input combinations | < 1 s |
| `tb_unbias_clock_counter` | START-to-STOP count is exact for asynchronous inputs, including wrap-around | < 1 s |
| `tb_unbias_diff_reg` | 200 random counter pairs; every inspection bit | < 1 s |
| `tb_unbias_ctrl` | Cycle-exact sequence, including a start request while busy | < 1 s |
| `tb_unbias_ro` | Oscillator model's period, jitter band and variation bounds | < 1 s |
| `tb_unbias_puf` | 24 challenges end to end, with threshold 3,000 and no jitter. Each difference is checked against a race computed independently from the oscillator periods and against time stamps of the STOP signals. | ~10 s |
| `tb_unbias_puf_full` | All defaults: three 7.6 ms races, including one repeated challenge | ~30 s |
| `tb_unbias_fhd` | Seven chips, 4 challenges × 10 measurements; intra-FHD, inter-FHD and the predicted inter-FHD bound for every bit | ~2 min |

`tb_unbias_puf` also counts each mechanism and fails if one never happened:
straight and crossed switches, positive and negative differences, both response
values, and an ignored start.

**Seven-chip experiment.** `tb_unbias_fhd` runs at 1/64 of the threshold, i.e. 781
oscillations, so every difference shrinks by 64 and bit *i* there stands for bit
*i*+6 at full size. Results with the default seed:

| full-size bit | 16–12 | 11 | 10 | 9 | 8 | 7 | 6 |
|---|---|---|---|---|---|---|---|
| intra-FHD | 1.4 % | 3.1 % | 6.7 % | 13.3 % | 28.4 % | 47.9 % | 50.2 % |
| inter-FHD | 11.9 % | 26.2 % | 45.2 % | 50.0 % | 47.6 % | 57.1 % | 50.0 % |
| predicted inter-FHD bound | 0 % | 5.2 % | 39.2 % | 50 % | 50 % | 50 % | 50 % |

The testbench also evaluates the worst-case inter-FHD bound of step 2 above. It
uses σ = 7.2 cycles, the median over challenges of the spread across the seven
chips; at full size that is about 460 cycles. It checks that the bound never lies
more than 15 points above the measured value. As in the FPGA data, the bound is
loose where the bins are much wider than σ. It rises steeply, and matches the
measurement, once the bin width comes close to σ.

The shape is that of the FPGA measurements. Bits near the MSB are stable but not
unique, because the paths are biased. Low bits are unique but noisy. Bit 10 is the
best compromise. The FPGA measured 5.9 % intra-FHD and 45.1 % inter-FHD there. The
agreement partly reflects how the oscillator model was tuned (next section), so
it is a plausibility check, not a confirmation. At the reduced size, the ±1-cycle
quantisation of the clock counters does not shrink, so the lowest bits are
noisier than at full size. Only 4 challenges are used, to keep the run near two
minutes. A full 120-challenge run costs about 9 s of simulation per chip and
measurement at full size.

## The oscillator model

A ring of inverters cannot be simulated cycle by cycle. `unbias_ro` instead
toggles its output every half period. The half period is

```
19 × 400 ps × (1 + (sys + local) / 10^6)  ± jitter
```

* `sys` is drawn from the oscillator's position, uniformly within ±3 %. It is the
  same on every chip. It stands for routing and systematic process effects: the
  bias the PUF must tolerate.
* `local` is drawn from the position and `CHIP_SEED`, uniformly within ±0.53 %.
  It is the randomness that tells chips apart. This range makes the chip-to-chip
  σ of a difference about 520 cycles, close to the 521 reported for the FPGA
  build.
* The jitter is uniform within ±500 ps per half period. It gives about 20 cycles
  of noise on a difference, so bit 5 is noisy and bit 10 is stable, as on the FPGA.

These numbers are choices for this model, fitted to the published behaviour. They
are not measured properties of any device. The model has no temperature or
voltage dependence, so the published temperature/voltage experiment (intra-FHD up
to 14 % at 75 °C and ±10 % supply) cannot be reproduced.

## What follows the source design and what does not

Follows it:
* the two-path structure;
* oscillators with RO counters between path configurations, 19 inverters and a
  release at 50,000;
* 10 challenge bits and a 19-bit difference register;
* clock counters started by the Trigger and stopped by the race signals, sharing
  one clock;
* the response taken as a selectable bit of the difference.

This design's own choices:
* the switch polarity (1 = crossed) and the challenge bit order;
* the two-flop synchronisers in every receiving domain;
* the level-style race signals and the clear phase;
* counters as wide as the difference register;
* the subtraction order (upper minus lower);
* the whole controller and its handshake;
* the behavioural oscillator model and its parameters.

Related sizes:
* The narrative example of the difference register uses 22 bits; the
  implemented build uses 19, as here. `DIFF_W` changes it.
* The inspection-bit selection is not hardware, and the design does not include it.

Synthesis notes:
* Everything except `unbias_ro` is synthesizable. On an FPGA or ASIC, replace
  `unbias_ro` with a real inverter ring of the same single-output interface.
* `unbias_ctrl` combines the external reset with a registered clear to drive the
  RO counters' asynchronous reset. Lint reports this as the reset being used both
  as a reset and as data; it is intended.
