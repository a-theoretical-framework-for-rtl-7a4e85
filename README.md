# SAP: a Wallace-tree multiplier that stops switching when its operands are thin

A multiplier in a tensor accelerator switches on every cycle it is fed, even
when the operands carry almost no ones. Quantised INT8 weights such as
`+2 = 00000010` and slowly varying activations are the common case, and the
Wallace tree burns nearly its full switching budget on them anyway. Zero-skipping
needs an operand that is exactly zero. Power gating needs a multiplier with no
work at all. Neither helps a multiplier that is *busy but sparse*.

Stochastic Activity Prediction (SAP) handles that case in two halves:

* **A cheap predictor.** It counts the ones in each arriving operand pair,
  `Z = HW(A) + HW(B)`, and turns that count into one random bit
  `S ~ Bernoulli(Z / 2n)`. It then watches how often that bit flips over a
  window of `W` pairs. A low flip rate says the tree is about to do little
  work. This stands in for watching the tree's O(n²) internal nodes: the
  supporting analysis argues that a Wallace tree's activity depends on how
  many input bits are set, not on where they are.
* **An exact gate.** The tree is frozen only if the predictor says "low"
  (`SAP_low`) **and** a deterministic check proves that the frozen result is
  still the right answer (`ArchValidity`). That check passes when the operands
  have not changed, when one of them is zero, or when the weight is flagged as
  stationary and the activation has not changed. A wrong prediction can only
  lose a saving. It can never produce a wrong product.

This repository is synthesizable SystemVerilog for one SAP-guarded, unsigned
`n × n` Wallace-tree multiplier (default `n = 8`, `W = 256`), with a
self-checking testbench per block.

## Datapath and timing

```
            a,b (N bits each), in_valid
   ┌───────────────┬──────────────────────────────┬──────────────────────┐
   │               │                              │                      │
   ▼               ▼                              ▼                      │
 popcount ─Z─► bernoulli_encoder ◄─R─ lfsr   safety_controller           │
               S_t │  S_t-1 (flip-flop)        (held_a, held_b,          │
                   ▼                            sw_mode, SAP_low)        │
             toggle_monitor ──SAP_low────────────►│                      │
             (W pairs, tau_th)                    │ isolate_en, zero_hit │
                                                  ▼                      ▼
                                       operand_isolation: tree_a,b = load ? a,b : held
                                                  │
                                          wallace_multiplier
                                                  │ tree_p
                                   product <= (isolate & zero) ? 0 : tree_p
```

A pair presented in cycle *t*, with `in_valid` high, produces `product`,
`out_valid` and `isolated` at the clock edge that ends cycle *t*. The latency
is one cycle and one pair is accepted per cycle, with no back-pressure: the
unit sits in a lock-step array. Everything between the operand inputs and the
output register is combinational. That path runs through the popcount, the
comparator, the safety controller's 8-bit equality checks, the operand
multiplexer and the tree. `SAP_low` is a register. It is decided at the end of
one window and used throughout the next, so the predictor adds no delay to the
multiplier path other than the AND gate.

Reset is synchronous and active low. It clears `SAP_low`, the window, the
proxy flip-flop and the held operands, and it reseeds the LFSR. After reset the
unit runs unguarded for one full window.

## From Hamming weight to one random bit

`popcount` adds the two operands' one-counts, so `Z` lies in `0 … 2n`.
`bernoulli_encoder` draws `R`, uniform over `0 … 2n−1`, and outputs
`S = (R < Z)`. Exactly `Z` of the `2n` values of `R` give `S = 1`, so
`Pr(S = 1) = Z/2n`. This is the "calibrated" encoding: the bit's mean equals
the operands' bit density. Among one-bit encoders with that mean, it is the one
the analysis shows carries the most information about the tree's activity. `2n`
must be a power of two so that `R` can be a group of LFSR bits.

`R` comes from `lfsr`, a 16-bit Fibonacci LFSR with polynomial
`x¹⁶+x¹⁴+x¹³+x¹¹+1` (period 65 535) and seed `0xACE1`. It advances
`log2(2n)` bits per accepted pair, so that two consecutive draws never share a
bit of the sequence. This matters. An LFSR that shifts once per pair would make
`R_{t+1}` mostly `R_t` shifted, which correlates `S_{t+1}` with `S_t` and
biases the flip rate the whole scheme relies on. The width, polynomial, seed
and multi-bit step are choices made here. The method asks only for LFSR
thresholding of O(log n) cost.

## Flip rate, window and threshold

`toggle_monitor` compares each proxy bit with the previous one, which the
encoder's flip-flop keeps, and counts the differences over a window of `W`
accepted pairs. That is `W − 1` transitions, because the transition across a
window boundary is not counted. When the window closes, it sets
`SAP_low = (count < tau_th)` and holds that value for the whole next window.
Windows follow one another without overlap. Cycles with `in_valid` low are not
samples: they advance neither the window nor the LFSR.

If the operand density stays steady at `p = Z/2n`, the expected flip rate is
`2p(1−p)`. For `n = 8`:

| Z (ones in A and B) | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 |
|---|---|---|---|---|---|---|---|---|---|
| expected flip rate | 0 | 0.117 | 0.219 | 0.305 | 0.375 | 0.430 | 0.469 | 0.492 | 0.500 |
| toggles per 255 | 0 | 30 | 56 | 78 | 96 | 110 | 120 | 125 | 128 |

The rate is symmetric about `Z = n`: pairs that are almost all ones also flip
rarely. `tau_th` is an input port and counts toggles per window, so a rate
threshold `τ` becomes `tau_th = round(τ · (W−1))`. The testbenches use 100
(≈ 0.39). No fixed value is prescribed. The threshold is meant to be
calibrated for the workload, which also absorbs the bias from correlated or
asymmetric operands. Be careful with the window's precision. For `W = 256`, Hoeffding's
inequality bounds the chance that the measured rate misses its mean by `δ` or
more by `2·exp(−2·255·δ²)`. That is only about 0.56 for `δ = 0.05`. It falls
to 10⁻³ at `δ ≈ 0.12`, and to 10⁻¹³ only at `δ ≈ 0.24`. In practice the
windows are tighter than the bound: in `tb_sap_predictor`, rates averaged over
8 windows land within about 0.02 of `2p(1−p)`. A threshold should keep some
distance from the rates it has to separate.

## The safety controller: why a frozen tree is always right

`operand_isolation` keeps the last operands loaded into the tree (`held_a`,
`held_b`). It drives the tree from those registers whenever `load` is low,
that is, when isolation is on or no pair arrives. The tree therefore sees
constant inputs and nothing inside it switches. `safety_controller` computes:

```
zero_hit   = (a == 0) | (b == 0)
arch_valid = zero_hit | (a == held_a & (b == held_b | sw_mode))
isolate_en = in_valid & SAP_low & arch_valid
```

and the output register takes `0` when the isolation was justified by a zero
operand, and the frozen tree output otherwise. Each case is exact:

* **Stasis:** the tree holds exactly `a` and `b`, so its output is `a·b`.
* **Zero masking:** the product is 0, whatever the tree holds.
* **Stationary weight:** `sw_mode` is a compiler-set promise that the weight
  `b` has not changed since it was loaded. It replaces the weight comparison,
  so the comparator on `b` can stay idle. The activation must still match. An
  assertion in `safety_controller` checks the promise in simulation. The
  compiler must drop the flag on the first pair of a new weight.

Two points depart from the wording of the method, and both are on the side of
safety:

1. The method states stasis as "the operands equal those of the previous
   cycle". Here they are compared with the operands the tree **holds**. The
   two agree except right after a zero-masked cycle. At that point the tree
   still holds an older pair, and only the held-operand comparison guarantees
   that forwarding its output is exact. This form also needs no second set of
   operand registers.
2. The method lists the stationary-weight flag as a sufficient condition on
   its own. Taken literally, that would freeze the tree while the activation
   changes and return a stale product. The correctness argument only covers
   stasis and zero operands, so here the flag stands in for the weight check
   only.

## The Wallace tree

`wallace_multiplier` places the `n²` partial products `a_i & b_j` in column
`i + j`. In each stage it cuts every column into groups of three bits, each
reduced by a full adder (the sum stays in the column, the carry moves up one
column). A leftover pair goes through a half adder, and a single leftover bit
passes through. The reduction stops when no column holds more than two bits.
One `+` then adds the two remaining rows. The schedule is worked out at
elaboration by constant functions (`col_h(s, c)` is the height of column `c`
before stage `s`), so any `N ≥ 2` builds. For `N = 8` the column heights go:

```
stage 0: 1 2 3 4 5 6 7 8 7 6 5 4 3 2 1 0
stage 1: 1 1 2 3 3 4 5 5 6 4 4 4 2 2 2 0
stage 2: 1 1 1 2 2 3 3 4 4 4 3 3 2 2 2 1
stage 3: 1 1 1 1 2 2 2 3 3 3 2 2 2 2 2 2
stage 4: 1 1 1 1 1 2 2 2 2 2 2 2 2 2 2 2   -> carry-propagate adder
```

Operands are unsigned, since the partial products are the plain `a_i·b_j` of
the analysis. A signed INT8 datapath would need a Baugh-Wooley or similar
correction, which is not described and is not built. Negative two's-complement
values would also look dense to the predictor.

## Ports and parameters of `sap_multiplier`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset |
| `in_valid` | in | 1 | an operand pair is present |
| `a`, `b` | in | N | activation and weight, unsigned |
| `sw_mode` | in | 1 | stationary-weight flag: `b` equals the weight last loaded |
| `tau_th` | in | clog2(W) | threshold, toggles per window |
| `out_valid` | out | 1 | `in_valid` delayed one cycle |
| `product` | out | 2N | `a·b` of the pair presented one cycle earlier |
| `isolated` | out | 1 | that product came from a frozen tree |
| `sap_low` | out | 1 | predictor state for the current window |
| `arch_valid` | out | 1 | the current pair could be served by a frozen tree |
| `toggles`, `window_done` | out | clog2(W), 1 | flip count so far; pulse as a window closes |

| parameter | default | origin |
|---|---|---|
| `N` | 8 | INT8 operand width of the analysis |
| `W` | 256 | window; one 16×16 activation tile |
| `LFSR_W` | 16 | design choice (taps and seed in `sap_pkg`) |

Synthesised at the defaults (coarse yosys), the unit has about 410 word-level
cells and 69 flip-flop bits. Of those cells, 366 are in the Wallace tree. The
predictor and safety logic are O(n) next to the tree's O(n²).

## What is not here

* **The array around the multiplier.** SAP is meant for every MAC of a
  systolic array, with the weight popcount shared along a row that shares the
  weight. No array, accumulator, dataflow or row-sharing scheme is specified
  to build from. This RTL is one guarded multiplier, with `a`, `b` and
  `sw_mode` as the points an array would drive.
* **Power numbers.** The method is analytical, and no measured savings exist
  to reproduce. The testbenches count bit switching at the tree's inputs and
  outputs as a proxy. They do not count the internal nodes.
* **Signed operands**, as above.

## Testbenches and how to run them

Every testbench is self-checking and ends with a `TB_RESULT checks=… failures=…`
line.

| testbench | what it establishes |
|---|---|
| `tb_popcount` | all 65 536 pairs for `N = 8`, and every pair for `N = 3` |
| `tb_lfsr` | state matches a bit-serial reference; holds when disabled; period 65 535 |
| `tb_bernoulli_encoder` | exactly `Z` of 16 random values give `S = 1`, for every `Z`; flip-flop loads only when valid |
| `tb_toggle_monitor` | toggle count, window pulse and `SAP_low` against a model (`W = 16`) |
| `tb_sap_predictor` | full size; held pairs flip at `2p(1−p)` ± 0.04; a 4-bit instance fed `a = 0010`, `b = 0110` flips at ≈ 0.469, and with its threshold at rate 0.5 it sets `SAP_low`, never before the first 256 pairs |
| `tb_safety_controller` | the isolation rule on directed and 20 000 random cases |
| `tb_operand_isolation` | the tree sees the held operands exactly when `load` is low |
| `tb_wallace_multiplier` | every pair for `N = 8` and `N = 4`; random pairs for `N = 16` and `N = 5` |
| `tb_sap_multiplier` | end to end at the defaults: exact products, one-cycle latency, window timing, `SAP_low` rising and falling, isolation by stasis, zero and the weight flag, refused predictions, missed reuse, idle cycles |
| `tb_sap_workload` | 12 weight-stationary 16×16 tiles next to an unguarded tree: about 80 % of pairs served frozen, and switching at the tree's inputs and outputs about 35 % lower |

To run one with Verilator (5.x):

```
verilator --binary --timing --assert -Irtl rtl/*.sv tb/tb_sap_multiplier.sv \
          --top-module tb_sap_multiplier -Mdir obj && ./obj/Vtb_sap_multiplier
```

Each simulation takes well under a second. `rtl/sap_pkg.sv` must be read
before the modules, and `rtl/*.sv` already puts it first.

## Changing it

* **Operand width:** set `N`. `2N` must be a power of two, which the encoder
  checks. The tree and popcount adapt to any `N`.
* **Window:** set `W` (at least 2). `tau_th` widens to `clog2(W)` bits.
* **Threshold:** choose `tau_th` at run time from the table above and the
  workload's density. Lower values make isolation rarer but the prediction
  more certain.
* **Random source:** `LFSR_W` and the taps and seed in `sap_pkg`. Keep a
  maximal-length polynomial, and keep the step at `log2(2N)` bits per pair so
  that draws stay disjoint.
