# CycPUF: delay-based PUFs with their responses fed back into their challenges

A physical unclonable function (PUF) answers a challenge with a response set by
tiny, uncontrollable delay differences between nominally identical circuit paths.
Every chip answers differently, and nobody can build a copy. Strong PUFs (those
with huge challenge spaces) share a weakness, though: an attacker who collects
enough challenge–response pairs can train a model that predicts the rest.

A cyclic PUF (CycPUF) routes a few response bits back into the challenge. Each fed-back
response bit is XORed with one bit of the applied challenge, and the result
replaces that challenge bit at the PUF's input. The applied challenge can then
stay constant while the response keeps moving. One challenge no longer maps to
one response but to a *set* of responses visited over time. That poisons the
training data a modelling attack relies on. The idea works for any delay-based
PUF. This RTL provides it for three: the arbiter PUF (APUF), the ring-oscillator
PUF (ROPUF) and the butterfly PUF (BPUF).

The feedback network is ordinary logic and is given here as synthesizable RTL.
The PUF cores are different. Their whole function is to measure manufacturing
variation, so they cannot be written as portable logic. They are behavioural
models that reproduce each PUF's decision rule from a seeded model of the delays.

## The loop and its four response modes

Each PUF core stores one response vector per clock cycle. The response register
plays the part of the arbiter latch, the counter comparison or the butterfly
latch. Call the feedback function `F`. With the applied challenge `chal` held,
the CycPUF then evolves as

    R(n+1) = PUF( chal ^ F(R(n)) ),     R(0) = 0 after reset

`F(R)` has a 1 at challenge bit `CI(k)` whenever response bit `RI(k)` is 1, for
every feedback path `k`. A constant challenge therefore produces a sequence of
responses, and the sequence falls into one of four response modes:

| mode | what the response does under a constant challenge |
|---|---|
| binary | never changes; the PUF behaves as if it had no feedback |
| steady state | changes for a while (a "cool-down"), then settles on one value |
| oscillating | ends up cycling through two or more values, possibly after a cool-down |
| pseudo-random | keeps changing with no pattern |

Without noise the loop is a finite deterministic state machine. Every sequence
then ends in a fixed point (binary or steady state) or in a cycle (oscillating).
Pseudo-random behaviour comes from noise. The feedback can steer the PUF onto an
effective challenge whose two racing paths are so well balanced that jitter
decides the bit. From then on, each random decision changes the next effective
challenge.

The security-evaluation configuration has a single response bit. Every feedback
path carries that same bit, so the PUF only ever evaluates two challenges: `chal`
itself and `chal` with its `NFB` feedback bits inverted. Write `a = PUF(chal)`
and `b = PUF(chal ^ mask)`. Then:

- `a = 0`: the response stays 0. This is binary.
- `a = 1, b = 1`: the response is 1 from the first cycle on. This is binary.
- `a = 1, b = 0`: the response alternates 1, 0, 1, 0. This is oscillating.
- `a` or `b` within the noise: steady state (one lucky flip lands on a stable
  state) or pseudo-random.

Wider responses (the 4-bit configuration) give longer transients and longer
cycles. Steady state and oscillation then arise without any noise.

## The PUF core models

All three cores share one delay model (`cycpuf_pkg`). Each delay element has a
delay of 100 ps ± 5 ps, drawn uniformly from a hash of:

- an instance seed, which stands for the chip;
- the cell: a chain, a ring or a latch pair;
- the stage;
- the path alternative.

The same seed gives the same chip. Another seed gives another chip of the same
design. Every evaluation also adds a uniform jitter of at most `NOISE_PS` (2 ps
by default) to each side of the race. The jitter comes from a per-instance
xorshift generator, so a run is exactly repeatable. The models don't represent
temperature or supply-voltage effects.

| core | decision per response bit `j` |
|---|---|
| `apuf_core` | An edge races down two paths through `CHAL_W` switch stages. A stage passes the paths straight when its challenge bit is 0 and swaps them when it is 1. Each of the four ways through a stage has its own delay. Response 1 when the top path arrives first. |
| `ropuf_core` | Two rings of `CHAL_W` configurable stages. Challenge bit `i` picks one of two delay elements in stage `i` of both rings. Response 1 when ring A has the shorter loop delay. Comparing the loop delays stands in for two edge counters compared at the end of a window, one window per clock. |
| `bpuf_core` | A butterfly cell, two cross-coupled latches excited and released every clock. Each latch's feedback path runs through `CHAL_W` stages whose delay elements the challenge selects. Response 1 when the left path is faster. |

A tie gives 0. The configurable rings and butterfly paths let a 64-bit challenge
mean something for a single response bit, which is how the evaluated strong PUFs
are sized. Classic ROPUFs and BPUFs instead select cells with the challenge; that
variant is not modelled.

## Choosing the feedback paths

The original generator picks the fed-back response bits and the challenge bits
they drive at random, once per generated design. Here a seed, `FB_SEED`, makes
that choice deterministic:

- Path `k` drives challenge bit `P(k)`, where `P` is a seeded random permutation
  of `0 … CHAL_W-1`. `P` is built from an odd-multiply, add, xor-fold and
  multiply bijection on `ceil(log2 CHAL_W)`-bit words, plus cycle walking. No
  two paths drive the same challenge bit.
- The source response bit of each path is a seeded random choice. Several paths
  may share one response bit, as they must when the response has one bit.

The spread matters for the APUF. In an arbiter chain, inverting two neighbouring
challenge bits only flips the sign of the stages between them. Feedback bits that
happen to sit next to each other hardly change the race, and the CycAPUF then
almost never leaves the binary mode.

## Modules

| file | what it is |
|---|---|
| `rtl/cycpuf_pkg.sv` | category enum, delay and jitter model, hash, feedback-position functions |
| `rtl/cyc_feedback.sv` | the XOR feedback network (combinational, synthesizable) |
| `rtl/apuf_core.sv`, `rtl/ropuf_core.sv`, `rtl/bpuf_core.sv` | behavioural PUF cores, one evaluation per clock |
| `rtl/cycpuf.sv` | one CycPUF: a core of category `CATEGORY` plus its feedback; `NFB = 0` gives the plain (acyclic) PUF |
| `rtl/cycpuf_top.sv` | the three strong CycPUFs of the security evaluation on one challenge bus |

The top's defaults are the sizes of the security evaluation:

| parameter | default | meaning |
|---|---|---|
| `CHAL_W` | 64 | challenge bits |
| `RESP_W` | 1 | response bits per PUF |
| `NFB_APUF`, `NFB_ROPUF`, `NFB_BPUF` | 4, 16, 12 | feedback paths per CycPUF |
| `CHIP_SEED` | `32'h0c1c_0001` | which simulated chip |
| `NOISE_PS` | 2 | jitter bound in ps |

The top has these ports:

- `clk`, and `rst_n` (asynchronous, active low; clears every response to 0).
- `chal`, the applied challenge.
- `resp_apuf`, `resp_ropuf`, `resp_bpuf`: each is a new response every cycle.
  The first arrives at the first rising edge after reset is released.
- `chal_eff_*`: the effective challenge each core sees in the current cycle.

The small weak PUFs used for the area and metric measurements are
`cycpuf #(.CHAL_W(4), .RESP_W(4), .NFB(…))`. No feedback count is published for
them; the metrics testbench uses 2.

Synthesis yields the feedback XORs and the response and noise registers. The
delay race is evaluated arithmetically, so the netlist of a core is a model, not
a PUF. On silicon or an FPGA the core has to be replaced by a real hand-placed
delay structure, with the same ports, and the feedback kept as is.

## Simulating

Every testbench is self-checking and ends with a `TB_RESULT checks=… failures=…`
line. Reference models of the delays and the feedback network live in
`tb/cycpuf_ref_pkg.sv`, written apart from the RTL. From the directory holding
`rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb \
      rtl/cycpuf_pkg.sv tb/cycpuf_ref_pkg.sv rtl/cyc_feedback.sv \
      rtl/apuf_core.sv rtl/ropuf_core.sv rtl/bpuf_core.sv rtl/cycpuf.sv \
      rtl/cycpuf_top.sv tb/tb_cycpuf_top.sv --top-module tb_cycpuf_top
    ./obj_dir/Vtb_cycpuf_top

| testbench | what it shows |
|---|---|
| `tb_cyc_feedback` | effective challenge equals the reference for random inputs; paths drive distinct bits; `NFB = 0` passes through |
| `tb_apuf_core`, `tb_ropuf_core`, `tb_bpuf_core` | reset value, one-cycle latency, exact responses without noise, responses beyond the jitter correct with noise, two chips disagreeing on part of the challenges |
| `tb_cycpuf` | the closed loop, cycle by cycle, for all categories at 16-bit challenge / 4-bit response / 6 paths without noise; steady-state and oscillating modes appear; the acyclic PUF stays binary |
| `tb_cycpuf_top` | the whole chip at its default size: 400 challenges held 64 cycles each, every response and effective challenge checked, every response mode required |
| `tb_faulty_cycpuf` | the strong CycPUFs with 2 / 11 / 7 injected faults (stuck-at-0, stuck-at-1, bit flip) on their effective-challenge nets, checked cycle by cycle against the faulty reference, with the response modes of faulty and fault-free PUFs side by side |
| `tb_metrics_4x4` | uniqueness, uniformity and reliability of 4×4 weak PUFs over 8 chips, acyclic against cyclic, using the average bit value (below) |

A typical `tb_cycpuf_top` run sorts its 400 challenges per PUF roughly as
follows:

| PUF | binary | steady state | oscillating | pseudo-random |
|---|---|---|---|---|
| CycAPUF | 341 | 2 | 36 | 21 |
| CycROPUF | 350 | 14 | 17 | 19 |
| CycBPUF | 311 | 12 | 51 | 26 |

The testbench's rule for the modes:

- binary: constant over the whole hold;
- steady state: constant over the last 32 cycles;
- oscillating: periodic there, with a period of 2 to 8 cycles;
- pseudo-random: anything else.

## Measuring a PUF that has no single response

The classic PUF metrics assume one response per challenge and per chip. For a
CycPUF, each response bit is instead averaged over the `c` cycles for which the
challenge is held. This gives its average bit value, read as 1 when it is at
least 0.5:

    ABV(j) = (1/c) · Σ_{i=1..c} r_j(i)

Three metrics are then taken over these ABV responses:

- uniqueness: the mean pairwise fractional Hamming distance between chips
  (ideal 50 %);
- uniformity: the mean fractional Hamming weight (ideal 50 %);
- reliability: one minus the mean fractional distance to repeated measurements
  (ideal 100 %).

`tb_metrics_4x4` computes all three. In this model, acyclic and cyclic PUFs
alike come out near 50 % uniqueness and 44–58 % uniformity. Reliability is 100 %
at 4 stages, because there the jitter rarely decides a bit. The published FPGA
measurements show a different picture. There, the acyclic APUF and BPUF have
poor uniqueness (7.6 % and 11.5 %), commonly put down to asymmetric routing, and the cyclic
versions lift it to about 47 % and 53 %. The delay model here has no systematic
bias, so it cannot reproduce that effect. Don't read the model's metrics as a
prediction of silicon.

## How far to trust it, and where it departs from the original design

- **The feedback network** follows the published construction directly: response
  bit XOR challenge bit, into the challenge input. The seeded permutation is
  this implementation's stand-in for "random".
- **The loop is clocked.** The original treats the feedback as a cyclic
  combinational circuit on an FPGA. Here the loop closes through each core's
  response register, one new response per clock cycle. Responses are counted
  per clock cycle in the original as well. The RTL has no combinational loop,
  so standard lint and timing flows accept it. Asynchronous effects of a truly
  combinational loop, such as glitches inside a cycle, are not modelled.
- **The PUF cores are models.** Chain, ring and butterfly structures, delay
  numbers, noise and evaluation timing are all this implementation's choices.
  The original names the three PUF types and cites their designs; it does not
  detail them. The models don't reproduce the original's FPGA resource counts,
  power or measured metrics.
- **Reset.** Responses are cleared to 0, so the first effective challenge is the
  applied one. The original does not say how its loop starts.
- **Not included:** the generator script that produced the original netlists
  (its role is played by the parameters); the FPGA implementation itself; and
  the machine-learning attack used in the evaluation. The fault-injection testbench
  places its faults on the effective-challenge nets. The original does not say
  where its faults were placed, only how many there were.
