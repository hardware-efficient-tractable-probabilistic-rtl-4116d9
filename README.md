# Half-precision evaluation of a deterministic probabilistic circuit

A probabilistic circuit (PC) computes a probability by multiplying and adding many smaller
probabilities. In a large circuit the result can be tiny: the trained circuits in the
publication this RTL follows ("Hardware-efficient tractable probabilistic inference for TinyML
Neurosymbolic AI applications", COINS 2025) reach values of 1e-53 to 1e-271. Half precision
(IEEE binary16) has no normal number below 2^-14 ≈ 6.10e-5. So such a circuit underflows to
zero, and the zero then spreads through every product above it.

The fix works when the circuit is **deterministic**: for any complete assignment of the
variables, only one term of the circuit's polynomial is non-zero. That term is a product of one
weight per variable. Replace every weight θ by its n-th root θ^(1/n), and the circuit returns
F^(1/n) instead of F. The host then recovers F by raising that result to the power n, in higher
precision or in the log domain. The root index n is the smallest integer for which the smallest
possible output still clears the underflow threshold: P_min^(1/n) ≥ 2^-14. The graph does not
change and no weight is dropped, so the result is still exact, up to binary16 rounding.

This RTL implements the hardware half of that scheme:

* binary16 arithmetic units that flush to zero below 2^-14, and
* a pipelined evaluator hardwired to the three-variable example circuit of the publication.

The evaluator takes plain or root-transformed weights, accepts one piece of evidence per clock
cycle and returns the circuit value four cycles later.

## The example circuit

The circuit is a small Bayesian network compiled into a PC. Variable K is the parent of T and
of G, and all three are binary. Evidence arrives as indicators, one per value: `[+k]`, `[-k]`,
`[+t]`, `[-t]`, `[+g]`, `[-g]`.

```
root   = P(+k) * ( [+k] * S_T|+k * S_G|+k )  +  P(-k) * ( [-k] * S_T|-k * S_G|-k )
S_T|k  = P(+t|k) [+t] + P(-t|k) [-t]
S_G|k  = P(+g|k) [+g] + P(-g|k) [-g]
```

| weight (`pc_weights_t` field) | value | binary16 |
|---|---|---|
| `k_pos` P(+k)              | 0.45 | 3733 |
| `k_neg` P(-k)              | 0.55 | 3866 |
| `t_pos_kp`, `t_neg_kp` P(±t\|+k) | 0.9, 0.1 | 3B33, 2E66 |
| `t_pos_kn`, `t_neg_kn` P(±t\|-k) | 0.3, 0.7 | 34CD, 399A |
| `g_pos_kp`, `g_neg_kp` P(±g\|+k) | 0.2, 0.8 | 3266, 3A66 |
| `g_pos_kn`, `g_neg_kn` P(±g\|-k) | 0.6, 0.4 | 38CD, 3666 |

The binary16 words are in `fp16_pkg::PC_FIG2_WEIGHTS`. How to set the indicators:

* **Complete evidence:** exactly one indicator of each pair. The result is the joint
  probability P(k, t, g).
* **Unobserved variable:** both of its indicators. The result is the marginal.
* **Neither indicator of a pair:** the evidence is impossible and the result is 0.

The smallest joint probability of this network is 0.45 · 0.1 · 0.2 = 0.009, far above 2^-14.
The example therefore needs no rooting (n = 1). It is still useful as a test vehicle: loading
θ^(1/n) for n = 2, 3, 4, or scaling every weight by a constant, exercises the same mechanism
that large circuits depend on.

## Pipeline

Each level of the circuit is one stage, with a register after it.

| stage | circuit level | operators |
|---|---|---|
| 1 | the four inner sums S | 4 × `fp16_add`. A weight times an indicator is a select (weight or 0). |
| 2 | the two product nodes | 2 × `fp16_mul` (S_T · S_G), then gated by `[+k]` / `[-k]` |
| 3 | the weighted edges into the root | 2 × `fp16_mul` (P(±k) · product) |
| 4 | the root sum | 1 × `fp16_add`, registered to the outputs |

Timing:

* **Throughput:** one input per cycle (initiation interval 1).
* **Latency:** `out_valid` rises exactly `PC_LATENCY` = 4 rising edges after the edge that
  sampled `in_valid`.
* **No back-pressure:** every accepted input produces one result, in order.
* **Weights travel with the data**, so the weight set can change on any cycle without
  corrupting results already in the pipeline.
* **Flags:** `out_underflow` is set when either product node or either weighted edge, on a
  branch enabled by the K indicator, flushed a non-zero product to zero. `out_overflow` is set
  when any value saturated to infinity.
* **Reset:** `rst_n` is synchronous and active low, and clears every stage.

The publication builds one such block per trained circuit with a high-level synthesis tool. It
calls the result a pipelined custom block, aimed at 150 MHz on a Virtex UltraScale+ with DSP
blocks disabled, but it shows no internal structure. The one-level-per-stage layout above is
this design's own, and is the simplest pipeline with that behaviour.

## Number format

Every value is an IEEE 754 binary16 word: 1 sign bit, 5 exponent bits, 10 fraction bits, bias
15.

* **Flush to zero.** A subnormal input (exponent field 0) is read as zero. A rounded result
  below 2^-14 becomes zero, and the multiplier raises `underflow`. This is the underflow event
  that the root transform is meant to prevent, and it matches the ≈6.10e-5 threshold used to
  choose n. Keeping subnormals would move the threshold down to 2^-24, but the root indices
  quoted for the benchmarks assume 2^-14.
* **Rounding.** Both units round to nearest, ties to even. The multiplier forms the exact
  22-bit significand product and normalises it by at most one place. The adder aligns the
  smaller operand, keeping guard, round and sticky bits.
* **Adder signs.** `fp16_add` handles only non-negative operands: inside a PC every value is a
  probability. A sign bit on an input gives quiet NaN 0x7E00, and the evaluator asserts that
  no weight is negative.
* **Overflow and special values.** A result beyond 65504 becomes infinity and raises
  `overflow`. Infinity times zero, or any NaN input, gives 0x7E00.

The publication only names float16. Flush-to-zero, the rounding mode and the handling of
special values are this design's choices.

## Rooting, scaling and their limits

Two algebraic facts about a deterministic circuit over V variables drive the design. The
testbench checks both.

1. **Scaling.** Multiplying every weight by c multiplies a complete-evidence result by c^V.
   With c a power of two and no underflow, this is exact in binary16: dividing all ten weights
   by 4 must give the plain result divided by 4³ = 64, bit for bit. Dividing by 64 instead
   pushes results below 2^-14: they are flushed and flagged.
2. **Rooting.** With weights θ^(1/n), a complete-evidence result raised to the power n equals
   P(k, t, g) to within binary16 rounding. The error grows roughly by a factor n, because
   raising to the power n multiplies relative errors by n.

Rooting is exact only when a single term is active. When a variable is left unobserved, a sum
node adds two non-zero terms, and (a + b)^(1/n) ≠ a^(1/n) + b^(1/n). So for marginal queries a
rooted circuit does not return F^(1/n). The evaluator computes whatever weights it is given;
using rooted weights only with complete evidence is up to the user.

Two steps happen outside the block:

* **Choosing n.** The smallest n with P_min^(1/n) ≥ 2^-14 reproduces the float16 root indices
  quoted for the benchmark circuits: 13 for BNetFlix (P_min = 1.33e-53, 100 variables), 65 for
  DNA (4.6e-271, 180 variables) and 14 for the CIFAR-10 consistency circuit (1.72e-59, 19
  variables, 431 weights). The rooted minima are 8.6e-5, 6.9e-5 and 6.3e-5, all above 6.10e-5.
  So this datapath can carry those circuits' values.
* **Recovering F.** Raising the result to the power n is left to the host. Done in binary16,
  it would underflow again.

`tb/pc_workload_range_tb.sv` runs that range argument through the binary16 multiplier. For
each benchmark it multiplies out one active path of V weights, each set to P_min^(1/V), so that
the path's product is P_min. Each path is run three times, and all three benchmarks agree:

| weights | result |
|---|---|
| plain | underflows to zero |
| rooted with the quoted n | stays a normal number: 8.6e-5, 7.0e-5, 6.3e-5 |
| rooted with n - 1 | underflows, so the quoted index is the smallest that works |

With the quoted n, n · log10 of the result gives back log10 P_min to within rounding: -52.87
against -52.88, -270.03 against -270.34, and -58.81 against -58.76.

Those three circuits are not in this RTL: their graphs and weights are not published. A new
circuit is built the same way as `pc_eval_fig2`:

* one `fp16_add` per sum node and one `fp16_mul` per product or weighted edge;
* indicator leaves as selects;
* one register stage per circuit level.

## Interface of `pc_eval_fig2`

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock |
| `rst_n` | in | 1 | synchronous reset, active low |
| `in_valid` | in | 1 | evidence and weights are valid this cycle |
| `evidence` | in | 6 (`pc_evidence_t`) | `{k_pos, k_neg, t_pos, t_neg, g_pos, g_neg}` indicators |
| `weights` | in | 160 (`pc_weights_t`) | ten binary16 weights, plain or rooted |
| `out_valid` | out | 1 | result valid |
| `out_value` | out | 16 | binary16 circuit value |
| `out_underflow` | out | 1 | a product was flushed to zero |
| `out_overflow` | out | 1 | a value saturated to infinity |

## Files

| file | contents |
|---|---|
| `rtl/fp16_pkg.sv` | binary16 type, constants, evidence and weight structs, example weights, latency |
| `rtl/fp16_mul.sv` | combinational binary16 multiplier, flush-to-zero, underflow and overflow flags |
| `rtl/fp16_add.sv` | combinational binary16 adder for non-negative operands |
| `rtl/pc_eval_fig2.sv` | top: the pipelined evaluator of the example circuit |
| `tb/fp16_ref_pkg.sv` | reference arithmetic written with `real`: convert, operate in double precision, round to binary16 |
| `tb/fp16_mul_tb.sv` | directed and 30 000 random products, bit-exact with flags |
| `tb/fp16_add_tb.sv` | directed and 30 000 random sums, bit-exact with overflow flag |
| `tb/pc_eval_fig2_tb.sv` | end-to-end test of the evaluator |
| `tb/pc_workload_range_tb.sv` | the extreme product paths of the three benchmark circuits, plain and rooted |

What `pc_eval_fig2_tb` covers:

* a random evidence stream with idle cycles, under plain, rooted (n = 2..4), down-scaled and
  up-scaled weights;
* a bit-exact check against a node-by-node model, and the 4-cycle latency;
* a check against the network's true probabilities;
* a reset with results in flight.

It counts each mechanism and fails if one never happens: complete, marginal and impossible
evidence; back-to-back inputs; idle cycles; rooted recovery; exact c³ scaling; underflow;
overflow; reset flush. The evaluator has no parameters, so this test runs the design at full
size.

Each testbench ends by printing `TB_RESULT checks=N failures=M`. To run one with Verilator 5,
from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module pc_eval_fig2_tb \
  rtl/fp16_pkg.sv tb/fp16_ref_pkg.sv rtl/fp16_add.sv rtl/fp16_mul.sv \
  rtl/pc_eval_fig2.sv tb/pc_eval_fig2_tb.sv
./obj_dir/Vpc_eval_fig2_tb
```

For the unit tests, use `fp16_mul_tb` or `fp16_add_tb` with `rtl/fp16_pkg.sv`,
`tb/fp16_ref_pkg.sv` and the unit's own file. Every run finishes in well under a second.

## What follows the publication and what does not

**Taken from the publication:**

* the circuit graph, its indicator leaves and its ten weights;
* the use of binary16 arithmetic;
* the 2^-14 underflow threshold;
* the n-th-root weight transform and the rule for choosing n;
* recovery of F by a power n outside the block.

**Choices of this design:**

* the pipeline structure and the 4-cycle latency;
* the valid-only handshake and the synchronous reset;
* weights as a run-time input rather than constants;
* flush-to-zero, round to nearest even, and the handling of special values;
* a sign-free adder;
* the underflow and overflow flags.

**Not included:**

* the host processor that feeds the block and recovers F;
* the benchmark circuits, whose graphs are not published;
* the dynamic-rescaling and static pre-scaling alternatives that the publication weighs and
  rejects;
* max-product (MPE) evaluation, which it mentions only as a property of deterministic circuits;
* the neural-network and microcontroller (float32) parts of the neurosymbolic system.
