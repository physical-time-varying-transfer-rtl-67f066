# TVTF: a shuffled switched-capacitor supply against power side-channel attacks

A power side-channel attack recovers a cipher key by correlating the supply
current of a chip, sample by sample, with guesses of the data the cipher is
processing. The countermeasure described here breaks the link between *when*
the cipher draws current and *when* that current shows up at the supply pin.

The crypto core is never connected to VDD. It runs from a bank of small
on-chip capacitors. Each crypto clock cycle is cut into *n* phases (n = 10).
In every phase, one capacitor supplies the core and another one recharges
from VDD, and both are chosen pseudo-randomly. The charge the core takes in
one phase is therefore paid back to the supply by some other capacitor at a
random later phase. To an observer at the supply, the current trace is
shuffled in time and differs from one encryption to the next. The circuit's
transfer function from core current to supply current changes with time,
hence the name *time-varying transfer function* (TVTF).

Only the capacitors and their power switches are analog. Everything that
decides which switch closes is ordinary synthesizable logic. That logic is
what this repository contains.

```
            +---------------------- tvtf_top -------------------------+
            |  stochastic_prng #0 --rnd_chg--+                        |
 seeds ---->|   (8-bit LFSR, 4-bit LFSR,     |                        |
            |    4 x 2:1 mux)                +--> shuffle_ctrl ---+---|--> sw[9:0]   to-VDD switches
            |  stochastic_prng #1 --rnd_aes--+   (two arrays,     |   |
            |                                     pick + swap)    +---|--> sw[19:10] to-core switches
 clk (phase clock), rst_n, enc_active ------------------------------->|--> running
            +---------------------------------------------------------+

   VDD --sw[i]--+-- C(i+1) --+--sw[10+i]-- core supply rail       (i = 0..9, outside this RTL)
```

## The shuffling rule

Two lists hold the capacitor numbers. *to_be_charged* holds capacitors that
are waiting to be refilled. *to_supply_aes* holds full ones that are ready to
supply the core. With 10 capacitors each list has 5 entries.

In every phase:

1. Take the capacitor at position `rnd_chg mod 5` of *to_be_charged* and
   close its switch to VDD.
2. Take the capacitor at position `rnd_aes mod 5` of *to_supply_aes* and
   close its switch to the core.
3. At the end of the phase, swap the two. The capacitor that was just
   refilled becomes ready to supply the core. The one that just supplied the
   core now waits to be refilled.

This rule keeps three properties without any extra checking logic:

- The two chosen capacitors are always different, because they come from
  disjoint lists. The core therefore never sees VDD through a capacitor.
- A capacitor that has supplied the core is refilled before it can supply the
  core again, so the core rail droops by at most one phase's worth of charge.
  For 2 mA, 0.8 ns and 20 pF that is 80 mV.
- Exactly one switch of each group is closed in every running phase. The
  core is supplied every phase, so the cipher loses no throughput.

Before the first phase of an operation, all capacitors are refilled at once
for `PRECHARGE_PHASES` phases (10 by default, one crypto clock). During that
time the core is disconnected. After the precharge, C1..C5 go into
*to_supply_aes* and C6..C10 into *to_be_charged*.

### Timing of `shuffle_ctrl`

All outputs are registered on the phase clock `clk`. This clock runs at n
times the crypto clock: 1.25 GHz for a 125 MHz core.

| edge | state | `sw[9:0]` | `sw[19:10]` | `running` | `prng_step` before the edge |
|---|---|---|---|---|---|
| `enc_active` first seen high | IDLE -> PRECHARGE | all 1 | 0 | 0 | 0 |
| next 9 edges | PRECHARGE | all 1 | 0 | 0 | 0 |
| 10th edge after entry | -> RUN, first choice | one-hot | one-hot | 1 | 1 |
| every further edge, `enc_active` high | RUN | one-hot | one-hot | 1 | 1 |
| first edge with `enc_active` low | -> IDLE | 0 | 0 | 0 | 0 |

`prng_step` is combinational. It is high exactly on the edges that use the
random numbers, so each PRNG advances once per decision. Dropping
`enc_active` during the precharge also returns to IDLE. Both the precharge
and the array contents restart with the next operation.

## The random numbers: a two-level stochastic LFSR

Each of the two choices gets its own copy of `stochastic_prng`. Copy 0 feeds
the charging choice and copy 1 the supplying choice. One copy is built as
follows:

- A main 8-bit LFSR produces bits r7..r0. It uses x^8+x^6+x^5+x^4+1 and has
  period 255.
- A 4-bit LFSR produces bits s3..s0. It uses x^4+x^3+1 and has period 15.
- Four 2:1 multiplexers form the output: `b_i = s_i ? r[2i+1] : r[2i]`.

So the small LFSR sub-samples the big one. The two LFSRs step together, and
15 divides 255, so the output sequence repeats every 255 phases. The
testbench checks that it does not repeat after any shorter divisor of 255.

The length of that period is the design's main security knob. A longer
period means that the same pair of capacitors comes back at the same point
of an encryption less often. `MAIN_W` can be set to any width in the tap
table of `tvtf_pkg` (2..12, 16, 24, 32). For widths above 8, the extra bits
lengthen the period but are not multiplexed. `MAIN_W = 16` gives a period of
65535, and `MAIN_W = 32` gives 2^32-1.

**Seeds and reset.** The LFSRs have no reset. A seed is loaded once with
`seed_we`, which stands for one-time programming at manufacture. From then
on the registers only advance. The state left at the end of one operation is
the starting state of the next. Asserting `rst_n` between operations does not
restart the sequence, so an attacker cannot make every trace start from the
same state by power-cycling or resetting the controller. The only exception
is an all-zero state, which could appear with a zero seed or at power-up
before programming. The register escapes it by loading 1.

## Files

| file | what it is |
|---|---|
| `rtl/tvtf_pkg.sv` | default sizes (10 capacitors, 8/4-bit LFSRs, 4-bit numbers) and the LFSR tap table |
| `rtl/lfsr.sv` | Fibonacci LFSR with seed load, step enable and all-zero escape |
| `rtl/stochastic_prng.sv` | two LFSRs and the 2:1 multiplexer bank |
| `rtl/shuffle_ctrl.sv` | precharge and the two-array pick-and-swap |
| `rtl/tvtf_top.sv` | two PRNG copies and the shuffler; switch enables as ports |
| `tb/*_tb.sv` | self-checking testbench for each module |
| `tb/sc_array_model.sv` | behavioural model of capacitors, switches and supply (testbench only) |
| `tb/tvtf_config_tb.sv`, `tb/tvtf_config_run.sv` | the other evaluated configurations |

### Top-level ports (`tvtf_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | phase clock, n x crypto clock |
| `rst_n` | in | 1 | asynchronous reset of the shuffler; the LFSRs keep their state |
| `enc_active` | in | 1 | high while the core encrypts |
| `seed_we` | in | 1 | load `seed_main[k]` and `seed_sel[k]` into PRNG copy k |
| `seed_main` | in | 2 x `MAIN_W` | seeds of the main LFSRs |
| `seed_sel` | in | 2 x `SEL_W` | seeds of the select LFSRs |
| `sw` | out | 2 x `N_CAPS` | `sw[i]`: capacitor i+1 to VDD; `sw[N_CAPS+i]`: capacitor i+1 to the core |
| `running` | out | 1 | the core is supplied through the shuffled capacitors |

The enables are active high. The power switches are PMOS devices with about
10 ohm on-resistance, so the drivers that connect `sw` to their gates must
invert them. If the switches can be slower to open than to close, the
drivers must also provide break-before-make between phases.

Parameters: `N_CAPS` (10; must be even), `MAIN_W` (8), `SEL_W` (4),
`RND_W` (4; needs `2^RND_W >= N_CAPS/2` and `MAIN_W >= 2*RND_W`), and
`PRECHARGE_PHASES` (10). Synthesized at the defaults, the controller is
about 92 flip-flops.

## What the testbenches show

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself with a
watchdog if it hangs. Run one with plain Verilator, for example:

```
verilator --binary --timing --assert --timescale 1ns/1ps --top-module tvtf_top_tb \
    -y rtl -y tb +libext+.sv rtl/tvtf_pkg.sv tb/tvtf_top_tb.sv
./obj_dir/Vtvtf_top_tb
```

- `lfsr_tb` compares every step with the polynomial written out bit by bit.
  It measures the periods at widths 3, 4, 8 and 16, and checks seed load,
  hold and the all-zero escape.
- `stochastic_prng_tb` compares the output with an independent model of both
  LFSRs and the multiplexers for four seeds. It checks the 255-phase period
  and that all 16 values occur.
- `shuffle_ctrl_tb` uses random numbers from `$urandom`. It compares every
  switch pattern with a model of the two-list rule. Independently of that
  model, it checks that every capacitor was refilled before it supplies the
  core, checks the precharge length, and checks aborts.
- `tvtf_top_tb` runs at the default size with no parameter overrides. It
  drives the behavioural capacitor model with a random 0..2 mA core current.
  It checks the switch sequence against a reference model started from the
  seeds, that the core rail stays within 100 mV of VDD, and charge
  conservation. It also replays the same core-current trace after a reset and
  checks that the switches and the supply trace differ from the first run.
  Finally it checks that the supply current is only weakly correlated with
  the core current at lags 0..19: about 0.23, against 1.0 for a direct
  supply. It counts every mechanism and fails any that never happened.
- `tvtf_config_tb` runs 4, 6, 8 and 20 capacitors, and unequal capacitors of
  16..24 pF totalling 200 pF. It also runs main LFSRs of 16 and 32 bits, and
  checks for the 16-bit one that the period is 65535.

The capacitor model is ideal. It has an exponential RC charge through 10 ohm
and a linear discharge by the core current. It shows the shuffling and the
voltage budget. It does not predict attack resistance, which depends on the
real core's current waveform and on the measurement setup.

## Where this design makes its own choices

The block structure is taken from the published architecture. So are the
numbers: 10 capacitors and phases, one capacitor each to charge and to
supply, the two lists with a swap after every phase, 8-bit and 4-bit LFSRs
with four 2:1 multiplexers, two generator copies, and the numbering
`sw[9:0]` / `sw[19:10]`. The following are filled in here:

- **LFSR polynomials.** Standard maximal-length ones.
- **Multiplexer polarity.** `s_i = 1` selects the odd bit.
- **Generator roles.** Copy 0 drives charging and copy 1 drives supplying.
- **List sizes and initial contents.** Two halves: C1..C5 ready, C6..C10
  waiting.
- **Position mapping.** A number picks position `rnd mod (n/2)`. With 4-bit
  numbers and 5 positions, position 0 is picked 4/16 of the time and the
  others 3/16 each.
- **Precharge.** It lasts 10 phases and runs at the start of every
  operation.
- **Enables.** Active-high and registered, with no non-overlap generation.
- **Zero escape.** The LFSR leaves the all-zero state by loading 1.

One point departs from a loose reading of the published description. That
description gives the chance that a particular capacitor is picked as
1/(n-1), which would mean choosing any two distinct capacitors out of n. The
two-list rule instead chooses each capacitor among n/2. The two-list rule is
kept because it is what guarantees that a capacitor is refilled before it
supplies the core again.

Not built:

- The choice of m > 1 capacitors per phase. It was evaluated and found
  weaker than m = 1.
- Any multiplexer structure that uses the extra bits of a wider main LFSR.
  None is specified.
- The capacitors, switches, supply and crypto core themselves.
