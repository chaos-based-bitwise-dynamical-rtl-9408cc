# Chaos-based bitwise dynamical PRNG

A logistic map, x ← γ·x·(1 − x), looks chaotic for γ between about 3.57 and 4.
Once it is computed with 32-bit fixed-point numbers, though, every orbit falls
into a cycle, often a short one (on the order of 2^16 steps). A bit stream taken
from such an orbit fails statistical randomness tests. This generator avoids the
short cycles without widening the words. It keeps m chaotic parameters
γ_1 … γ_m and switches among them in turn. γ_1 is used for k_1 steps, γ_2 for
the next k_2 steps, and so on, and after γ_m it starts again at γ_1. The lengths
k_i are drawn at random from [9, 11] by a small linear congruential generator
(LCG). No fixed map is iterated long enough to settle into one of its short
cycles. The output is the least significant bit of every state x_i, so the
generator yields one bit per clock.

The RTL here implements that scheme in its main configuration: 32-bit words,
m = 8 parameters, k_i ∈ [9, 11], one map step per clock. The published
generator, on a Virtex-7, passed the standard statistical test suite at a
rate of 0.989 over 100 sequences of 10^6 bits. It used 510 LUTs, 120
registers and 13 DSP slices, and ran at 132 MHz.

## Structure

```
chaotic_prng_top
├── prng_control          control block: state machine + partition counter
│   └── partition_lcg     k_i generator
└── enhanced_prng         datapath
    ├── gamma_buffer      circular buffer of γ values, with its input mux
    └── basic_prng        seed (γ) register, state (x) register, output LSB
        └── logistic_map  combinational map step
```

`prng_pkg` holds the shared constants and `prng_ctrl_t`. That struct is the
bundle of enables that the control block drives into the datapath:
`write_en`, `read_en`, `load_en`, `init_en` and `step_en`.

## The map step and its number formats

The published description fixes only the word length: 32 bits for both x and
γ. This design picks the formats as follows:

| quantity | format | range |
|---|---|---|
| x (state) | unsigned Q0.32 | [0, 1) |
| γ | unsigned Q2.30 (Q2.(W−2) for other W) | [0, 4), used in [3.57, 4) |

`logistic_map` computes, without a clock:

1. `1 − x` exactly, on 33 bits (x = 0 gives exactly 1).
2. `x·(1 − x)` on 65 bits, truncated to its upper 32 fraction bits. This
   value is at most 1/4, so no integer bit is lost.
3. `γ · that`, a 64-bit product in Q2.62. Bits [61:30] are kept. For γ ≤ 4
   the true result is below 1, so the two integer bits are always zero.

Both truncations round toward zero, so the result is never above the exact
value and is less than 2^-29 below it. Every bit-exact model of this
generator has to use the same two truncation points. Different rounding gives
a different, equally valid, bit stream. x = 0 is a fixed point of the map,
so never start from x0 = 0. γ = 4 itself cannot be represented; the largest
γ is 4 − 2^-30.

## How γ circulates

γ lives in two places: the seed register of `basic_prng`, which the map reads,
and `gamma_buffer`, a FIFO of M = 8 words. The buffer's write port has a
2-to-1 mux in front of it. One input is the external config data. The other
is the seed register's output. The load enable drives the mux select, so a
push on the same edge as a seed load stores the outgoing γ. That mux makes
the FIFO circular:

* **Configuration.** The host writes γ_1 … γ_m through the config-data input
  of the mux. The buffer then holds m values.
* **Prime (one clock).** γ_1 is popped into the seed register, and x0 is
  loaded into the state register. The buffer holds m − 1 values.
* **Switch (one clock, inside generation).** On the clock edge of the k_i-th
  step under γ_i, three things happen together: the next γ is popped into the
  seed register, the outgoing γ_i is pushed through the seed side of the mux,
  and the map takes its step with γ_i. So exactly k_i consecutive steps use
  γ_i, and the next step already uses γ_{i+1}. The buffer keeps m − 1 values,
  and the order γ_1, γ_2, …, γ_m, γ_1, … is kept forever.

The buffer reads first-word-fall-through: its head is always on `rd_data`,
so a pop and the seed load happen on the same edge. It accepts a push and a
pop on the same edge even when full. A push into a full buffer without a pop,
or a pop from an empty one, is ignored, and an assertion reports it. m can
be any number from 1 to M. With m = 1 nothing is stored in the buffer after
the prime, and the control block makes no switch. That is the plain
single-γ logistic map, which the published work used as its baseline.

## Control block and host interface

`prng_control` is a three-state machine: IDLE → PRIME → RUN.

| state | what happens |
|---|---|
| IDLE | `cfg_ready = !buf_full`. Each `cfg_we` while ready stores `cfg_gamma`. `start` seeds the LCG with `lcg_seed` and goes to PRIME, if at least one γ is stored. With an empty buffer `start` is ignored. |
| PRIME | pops γ_1 into the seed register, loads `x0`, and takes k_1 from the LCG. |
| RUN | `step_en` every clock. A down-counter tracks the steps left under the current γ. When it reaches its last step, the control block takes the next k from the LCG and makes the switch described above (no switch when m = 1). |

The generator runs until reset. To load new γ values, reset it.

Timing at the top level (`chaotic_prng_top`), counting clock edges from the
edge that samples `start`:

```
edge 0   start sampled            -> PRIME
edge 1   γ_1 and x0 loaded         -> RUN   (running = 1)
edge 2   x_1 = f(x0, γ_1)         -> bit_valid = 1, random_bit = LSB(x_1)
edge n+1 x_n                      -> one new bit per clock, no gaps
```

`gamma_switch` is high during the clock whose edge changes γ.

## Partition lengths

`partition_lcg` steps s ← 1664525·s + 1013904223 (mod 2^32). It maps the
current state to k = KMIN + ⌊s[31:16]·(KMAX − KMIN + 1) / 2^16⌋, which is
9, 10 or 11 at the defaults. It uses the upper half of s because the low
bits of a power-of-two-modulus LCG repeat quickly. k_1 comes from the seed
itself, and each later k from the next LCG state. The published work says
only that k_i was drawn from [9, 11] with "a simple LCG". The constants, the
mapping and the seeding here are this design's own.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `W` | 32 | word length of x and γ (published value) |
| `M` | 8 | buffer entries, the largest usable m (published m = 8) |
| `KMIN`, `KMAX` | 9, 11 | range of k_i (published) |
| `GAMMA_FRAC` | W − 2 | fraction bits of γ (own choice) |

`KMAX` must be below 16, because k travels on 4 bits (`prng_pkg::K_W`).
`lcg_seed` is always 32 bits.

## What is this design's own

These parts follow the published generator:

* the map and the 32-bit words;
* m = 8 values of γ, used in order and reused circularly;
* k_i random in [9, 11] from an LCG;
* the LSB of every x_i as the output, one bit per clock;
* the block structure: seed register with load mux, feedback function,
  state, output function, and a FIFO of γ with a mux, selected by the load
  enable, that takes either config data or the seed register.

These parts are choices of this design, made where the description is silent:

* the fixed-point formats and truncation;
* the first-word-fall-through FIFO built from registers and pointers;
* loading x0 into the state register (`init_en`/`x0`);
* the whole control state machine, the PRIME cycle and the host handshake
  (`cfg_we`/`cfg_ready`/`start`);
* the LCG constants and the mapping to k;
* asynchronous active-low reset, which clears every register except the
  buffer storage.

The published generator had a control block of its own that is not
described, so its bit streams cannot be reproduced exactly from this RTL. A
stream here depends on the γ values, x0, the LCG seed and the choices
above.

Resources differ too. The published 120 registers cannot hold eight 32-bit
γ values, so the buffer there was probably in LUT RAM. Here `gamma_buffer`
is a plain array (`mem`), which a synthesis tool may map to distributed RAM
or to flip-flops. The two 32 × 32-bit multiplications are written as `*` and
are left to the tool (DSP slices on an FPGA). There is no pipelining, so
the clock rate depends on two multipliers in series. The 132 MHz figure has
not been checked.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog. `prng_ref_pkg`
holds the reference model. It computes the map with 128-bit integer
arithmetic and the LCG separately from the RTL. It also has a cycle-level
model of the whole generator (γ queue, partition counter, state).

| testbench | what it checks |
|---|---|
| `tb_logistic_map` | corner values (x = 0, 1/2, extremes, γ = 1) and 3000 random pairs against the integer model; error against real arithmetic below 2^-29 |
| `tb_basic_prng` | random load/init/step enables, every register each cycle; a load and a step on the same edge use the old γ |
| `tb_gamma_buffer` | random legal pushes and pops against a queue: head, count, empty, full, including a push and pop on a full buffer |
| `tb_partition_lcg` | k against the reference LCG every cycle; range [9, 11]; all three values occur |
| `tb_prng_control` | config acceptance and refusal when full, start ignored when empty, the PRIME enables, and every switch decision against the model, for m = 8, 3, 1 |
| `tb_enhanced_prng` | the datapath driven by a testbench sequencer; x and γ every cycle; γ_1 is reused after each round |
| `tb_chaotic_prng_top` | end to end at default parameters for m = 8 (20,000 bits), 3 and 1. Every bit matches the model; 3-clock latency; one bit per clock. It counts each mechanism (refused write, ignored start, switch, k = 9/10/11, γ_1 reuse, a run without switching) and fails if any never occurs. It also checks a monobit bound. |
| `tb_short_cycle` | the reason for switching γ. With one γ (3.9) the state enters a cycle within 200,000 steps (tail 18,789, period 7,399). The output bits repeat with exactly that period. With eight γ values from the same x0, 199,942 of 200,000 states are distinct. |
| `tb_nist_sequence` | one full 10^6-bit sequence in the main configuration, bit-exact against the model, plus the frequency (monobit) and runs tests at significance 0.01 |

The full statistical suite over 100 sequences has not been run on this RTL.
The two tests above are the only statistics checked.

To run a testbench with Verilator 5, from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/prng_pkg.sv tb/prng_ref_pkg.sv tb/tb_chaotic_prng_top.sv \
    --top-module tb_chaotic_prng_top -o sim
./obj_dir/sim
```

Swap in another testbench name to run it. `tb_nist_sequence` takes a few
seconds; all the others take under a second. To lint one module on its own:
`verilator --lint-only -Wall -Irtl rtl/prng_pkg.sv rtl/<module>.sv`. The
remaining lint warnings cover:

* product bits that are dropped on purpose;
* package constants that a module does not use;
* `rst_n` appearing in both flop resets and assertion `disable iff` clauses.
