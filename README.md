# SHIELD: ring-oscillator power obfuscation for a shared FPGA

In a multi-tenant FPGA, tenants share one power distribution network. An
adversarial tenant can place ring oscillators (ROs) next to a victim and count
their oscillations. When the victim draws more current, the local supply drops
and the rings slow down. For an RSA core built on square-and-multiply, that
current follows the key: the multiplier works only when the exponent bit is 1.
A simple power analysis then reads the key from the trace.

SHIELD is a defence the victim tenant can deploy in its own area, without
touching the application. It has three parts:

1. A **power monitor**: M ring-oscillator counters placed next to the circuit to
   be protected. Each window their counts are averaged into one power sample.
   A high sample means the supply is high, so the protected circuit is quiet.
2. A **controller** that compares each sample with a threshold and decides how
   much noise to add.
3. A **noise generator**: thousands of small rings in seven sets. Each enabled
   set draws current from the same rail.

The noise is *controlled*, not random. It is switched on only while the
protected circuit is quiet, and raised step by step while it stays quiet. It is
switched off as soon as the circuit is busy again. This fills in the valleys of
the trace, which is where the key shows, and costs less power than rings that
are always on.

The RTL in `rtl/` implements this scheme for the design point the method
selects: 32 monitor counters sampled from a 10 MHz reference clock, seven noise
sets and 8192 noise rings.

## Block structure

```
                     shield_top
  +-------------------------------------------------------------------+
  |  power_monitor                                                    |
  |    sample_timer --ro_en/cnt_clr/capture-->                        |
  |    ro_counter x M (ring_oscillator + tff_ripple_counter)          |
  |    count_averager ---------- sample, sample_valid ---------+      |
  |                                                            v      |
  |  shield_controller                                                |
  |    threshold_bank (4 regs, mux) --thr--> magnitude_comparator     |
  |    level_counter (2-bit, modulo) --sel-^         | lt/eq/gt       |
  |    FSM: SAMPLE -> DETECT -> ENABLE -> OBF_CHECK -> DISABLE        |
  |                                                  | set_en[6:0]    |
  |  noise_generator                                 v                |
  |    NG_RO rings (AND + inverter + T-FF), 7 sets                    |
  +-------------------------------------------------------------------+
```

| file | role |
|---|---|
| `shield_pkg.sv` | level width, controller states, window phases, comparator result, level-to-sets mapping |
| `ring_oscillator.sv` | **behavioural model** of an AND-gated inverter ring |
| `tff_ripple_counter.sv` | chain of T flip-flops counting ring edges |
| `ro_counter.sv` | one ring plus its counter |
| `sample_timer.sv` | reference counter that opens and closes the counting window |
| `count_averager.sv` | sum of M counts, shifted right by log2(M) |
| `power_monitor.sv` | M counters, timer and averager |
| `threshold_bank.sv` | four threshold registers and the selecting mux |
| `magnitude_comparator.sv` | A<B, A=B, A>B between sample and threshold |
| `level_counter.sv` | 2-bit modulo counter holding the activation level |
| `shield_controller.sv` | run-time FSM |
| `noise_generator.sv` | the noise rings, grouped into sets |
| `shield_top.sv` | top level |

## Measuring the supply with ring counters

A ring's frequency rises and falls with the local supply voltage, roughly
`f = k*V + f0`. A synchronous counter cannot run at ring speed. Each ring
therefore drives a chain of toggle flip-flops: stage 0 toggles on every rising
ring edge, and stage *i* toggles when stage *i*-1 falls. The chain is a binary
up-counter, and no stage runs faster than half the ring frequency.

The T-FF chain runs in the ring's own clock domain and ripples, so its value
cannot be read while the ring is running. `sample_timer` therefore counts
reference clocks and sequences every window as follows:

| phase | length (reference cycles) | what happens |
|---|---|---|
| RUN | `C_REF` | rings enabled, counters count |
| SETTLE | `SETTLE` | rings stopped, ripple settles |
| CAPTURE | 1 | `count_averager` registers all M counts and their average |
| CLEAR | 1 | counters cleared (asynchronous clear) |

The ring frequency is `f_RO = C_RO * f_ref / C_REF`. With the defaults
(`C_REF = 4`, `SETTLE = 2`) there is one sample every 8 reference cycles. That
is 800 ns at 10 MHz. `sample_valid` pulses one cycle after CAPTURE. The timer's
outputs are flip-flops of their own, so the asynchronous clear cannot glitch
when the phase changes.

M must be a power of two, so the average is a shift. The defaults, M = 32 and
N = 64 bits per counter, give the 2048 counter flip-flops of the selected
design point.

## The run-time rule

The controller's activation level (0 to 3) lives in a 2-bit modulo counter.
Each level has its own threshold. Noise raises the mean power, which lowers the
monitor count, so the threshold must follow the noise already added. Let *s* be
a new sample and *T[L]* the threshold of level *L*:

| level | condition on the new sample | next level | sets on |
|---|---|---|---|
| 0 | s > T[0] (quiet: fluctuation detected) | 1 | 1 |
| 0 | otherwise | 0 | 0 |
| 1, 2 | s > T[L] (still quiet, not obfuscated) | L+1 | 3, then 7 |
| 1, 2 | otherwise (busy again: obfuscated) | 0 | 0 |
| 3 | any sample | 0 | 0 |

"Above" means strictly greater. The FSM spends one state on each step of this
flow: `S_SAMPLE` waits for a sample with the noise off; `S_DETECT` compares it
with `T[0]`; `S_ENABLE` increments the level; `S_OBF_CHECK` waits for the next
sample and asks "obfuscated?"; `S_DISABLE` clears the level. At level 3 the
"obfuscated" decision does not depend on the comparator. Because the counter is
modulo 4, one more increment would also bring it back to 0. The two
formulations are equivalent; the RTL states the rule explicitly.

Timing, counted in edges of the reference clock after the edge that sees
`sample_valid`:

| edge | event |
|---|---|
| 1 | state becomes DETECT (or ENABLE / DISABLE from OBF_CHECK) |
| 2 | state becomes ENABLE |
| 3 | the level changes |
| 4 | `set_en` changes |

All of this falls inside the next counting window.

The thresholds reset to all ones, so nothing is detected until they are
loaded. They are written through `thr_wr_en / thr_wr_idx / thr_wr_data`, by
whatever processor configures the defence. Choosing them is an offline step:
for each level, pick a value between the count with the protected circuit busy
and the count with it quiet, both at that level's noise. In terms of power the
threshold rises with each level; in terms of the ring count it falls, so loaded
values normally satisfy T[0] > T[1] > T[2] > T[3]. The hardware does not
require this order.

## Noise generator

Ring *r* belongs to set `floor(r * NUM_SETS / NG_RO)`, so the sets differ in
size by at most one ring. With 8192 rings, each set has 1170 or 1171. Each ring
is an AND gate (enable, feedback), one inverter, and a T flip-flop with T = 1 on
its output. The ring is still a combinational loop. The flip-flop gives it a
registered load, which keeps FPGA tools' loop checks from flagging and
removing it, and it halves the frequency that leaves the ring. The flip-flop outputs leave `noise_generator` as `tff_q` for
testing. In `shield_top` they are unconnected: the rings exist to draw current.
On an FPGA they must be kept with a keep/don't-touch attribute (`(* keep *)`
is on the instances) and placed by hand.

Levels 1, 2 and 3 enable 1, 3 and 7 sets, defined by `shield_pkg::sets_at_level`.

## Parameters

| parameter (top) | default | meaning |
|---|---|---|
| `M` | 32 | monitor counters (power of two) |
| `N` | 64 | T-FFs per counter; also the sample and threshold width |
| `MON_NUM_INV` | 3 | inverters in a monitor ring |
| `C_REF` | 4 | reference cycles per counting window |
| `SETTLE` | 2 | idle cycles before reading |
| `NG_RO` | 8192 | noise rings |
| `NUM_SETS` | 7 | noise sets |
| `NG_NUM_INV` | 1 | inverters in a noise ring |
| `T_STAGE_PS` | 400 | stage delay of the ring model at the nominal supply |

## What is modelled rather than designed

- **Rings** (`ring_oscillator`). A ring is a combinational loop, and its whole
  function is its delay, so it is a behavioural model with `#` delays and
  cannot be synthesized as written. The model scales a 400 ps stage delay by
  `VNOM / vdd_mv`. The input `vdd_mv` stands for the rail voltage at the ring;
  the real part has no such pin. On an FPGA, replace the model with a
  hand-placed LUT ring of the same ports minus `vdd_mv`. Everything else in
  `rtl/` is synthesizable.
- **Supply network** (`tb/pdn_model.sv`). A resistive drop with the following
  terms:

  | source of current | drop |
  |---|---|
  | squarer | 20 mV |
  | multiplier | 40 mV |
  | all noise sets together | 40 mV, shared evenly among the sets |

  Two statements of the noise budget disagree: half a multiplier per set, or at
  most one multiplier in total. The model uses one multiplier in total. The RTL
  does not depend on this choice.
- **Protected tenant** (`tb/rsa_sm_model.sv`). Square-and-multiply from the
  least significant bit, 24 reference cycles (3 samples) per exponent bit, with
  real modular arithmetic on a 32-bit modulus.
- Not included: the processor that reads samples and loads thresholds, the
  attacker's circuit, placement (the monitor must sit close to the protected
  circuit), and the offline design-space exploration that picks M, the
  placement and the sampling rate.

## Own choices where the description is open

| item | choice |
|---|---|
| `C_REF` | 4 |
| `SETTLE` window | stop the rings before reading, then clear |
| counter chain | stage *i* clocked by the inverted output of stage *i*-1 |
| counter clear | asynchronous |
| counter width | 64 (2048 FFs / 32 counters) |
| threshold registers | write port; reset to all ones |
| comparator operands | A = sample, B = threshold |
| "above" | strictly greater |
| levels to sets | 1, 3, 7 |
| rings per set | equal split |
| noise ring | one inverter |
| FSM encoding | one state per step of the flow |
| reset | asynchronous, active low |

The description is inconsistent on which direction triggers the noise. One
passage ties a detected peak in oscillation frequency to key bit 1. The
activation and switch-off rules, and the stated aim of covering the victim's
silent periods, need the opposite: a high count (quiet) triggers noise. The RTL
follows the rules.

## Simulating

Every testbench is self-checking and ends with
`TB_RESULT checks=<n> failures=<n>`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/shield_pkg.sv \
          tb/tb_shield_top.sv --top-module tb_shield_top -Mdir obj -o sim
./obj/sim
```

Use the same command for any `tb/tb_<block>.sv`.

**`tb_shield_top`** exponentiates with a random 1024-bit exponent twice:

| phase | thresholds | effect |
|---|---|---|
| unprotected | at reset | the noise never switches on |
| protected | loaded | the defence runs |

It checks every sample against the possible voltage range. After every sample
it compares the level and the set enables with a reference model of the rule
above. It requires each mechanism to occur at least once: detection, step-up,
switch-off on a low sample, and switch-off after all sets. It also checks the
exponentiation result. For the supply model above it reports:

| measure | unprotected | protected |
|---|---|---|
| quiet-minus-busy sample gap | 5.00 counts | 4.14 counts |
| key bits wrong, per-bit mean vs. fixed threshold | 0 of 1024 | 133 of 1024 |
| mean reaction time | — | 2.0 samples |

The reaction time runs from the start of a quiet bit until noise is on. These
numbers come from the toy supply model and are illustrations, not predictions
for silicon. To keep simulation short, this bench uses 4 monitor counters of 16
bits and 14 noise rings.

**`tb_shield_dse`** repeats that flow at the points of the design-space
exploration, with a 256-bit exponent. The tenant stays at 10 MHz while the
reference clock changes:

| point | quiet/busy count | wrong key bits, unprotected | wrong key bits, protected | reaction |
|---|---|---|---|---|
| 16 counters, 10 MHz | 123 / 118 | 0 | 31 of 256 | 2.00 |
| 32 counters, 10 MHz | 123 / 118 | 0 | 33 of 256 | 2.00 |
| 64 counters, 10 MHz | 123 / 118 | 0 | 34 of 256 | 2.00 |
| 32 counters, 50 MHz | 25 / 24 | 0 | 120 of 256 | 2.00 |
| 32 counters, 100 MHz | 12 / 12 | 129 | 129 of 256 | — |

In this model every ring sees the same rail and has no jitter, so the number
of counters changes nothing; on silicon, averaging more counters removes
counter and placement errors. A faster reference clock shortens the window and
costs resolution. At 50 MHz quiet and busy windows are one count apart, so the
protected trace falls almost to guessing. At 100 MHz the monitor cannot see the
tenant at all, so the defence has nothing to react to; that point is checked
only for the rule and the result. Stretching the window (a larger `C_REF`)
restores resolution at any clock.

**`tb_shield_top_full`** runs the same flow with every parameter at its
default: 32 × 64-bit counters and 8192 noise rings, with a 32-bit exponent.
It reaches the same counts and the same 2.00-sample reaction time. A simple
power analysis gets 8 of the 32 key bits wrong under protection, against 0
without. The 8192 ring models make the C++ build take about three minutes; the
simulation takes about 30 s.

## Limits

- The ring model is a first-order delay model. Real rings have jitter,
  placement-dependent frequency, and supply effects with inductance and
  delay. None of these is modelled, and the supply model has no time
  constant.
- Metastability is avoided by stopping the rings before reading, not by
  synchronizers. That relies on the `SETTLE` cycles being longer than the
  ripple time of an N-stage chain.
- No FPGA implementation, timing closure or power estimate was done with this
  RTL.
