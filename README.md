# Time-domain popcount and argmax for an asynchronous Tsetlin Machine

A Tsetlin Machine (TM) classifies a Boolean feature vector in two steps.
First, each class has a set of clauses: conjunctions of features and negated
features. Half of the clauses vote for the class and half vote against it.
Second, a popcount gives each class sum (votes for minus votes against), and
an argmax picks the class with the largest sum. In an adder-based design the
popcount and argmax take most of the inference latency and a large share of
the logic.

This design does both steps in the time domain, without adders or
comparators:

* **Popcount as delay.** Each class has a *programmable delay line* (PDL): a
  chain of identical delay elements, one per clause. A transition launched
  into the chain passes each element over either a short or a long routed
  net. The clause output chooses which. A class with more votes therefore
  gets its transition to the end of its line sooner.
* **Argmax as a race.** *Arbiters* (cross-coupled SR latches) watch the ends
  of the lines, and a tree of them reports which line finished first. That
  line belongs to the winning class.

The delay depends on the input vector, so a clock sized for the worst case
would waste most of its period. The design is therefore an asynchronous,
two-phase, single-rail pipeline stage (a MOUSETRAP stage). Each inference
ends as soon as its own race is decided and every line has settled.

The RTL is parameterised. Its defaults are a three-class model with 12
Boolean features and 10 clauses per class (a model of the size used for the
Iris data set). The net delays are the ones reported for that model:
375.4 ps for the low-latency net and 641.9 ps for the high-latency net.

## One inference, step by step

```
 req ─►┌────────────┐ done ──► bundling net (BUNDLE_PS) ──► start ──┐
       │ MOUSETRAP  │                                              │ (one flip-flop per PDL, on clk)
 x_i ─►│ bit + data │ x_held ─► clause block c ─► CLAUSE_PS ─► sel ─┤
       │  latches   │                                              ▼
       └──▲─────────┘                  PDL c:  FF ─► DE0 ─► DE1 ─► … ─► DE(N-1) ─► pdl_o[c]
          │ en = XNOR(done, ack)                                            │
          │                                   arbiter tree (argmax) ◄───────┤
          │                                      │ completion, class_o      │
          └──────── ack ◄── async controller ◄───┴──────────────────────────┘
```

1. The environment puts a feature vector on `x_i` and toggles `req`. The
   latches are open, so the toggle reaches `done`. Now `done` ≠ `ack`, so
   `en` falls and the bit latch and data latch hold the request and the
   vector.
2. The clause blocks evaluate the held vector. `done` also enters the
   bundling net, whose delay `BUNDLE_PS` must exceed the clause logic delay
   `CLAUSE_PS`. The delayed `done` is the start transition of every PDL.
3. Each PDL begins with a D flip-flop clocked by the free-running `clk`. All
   PDLs therefore launch on the same clock edge, however unevenly the start
   signal fans out.
4. The transition runs down every PDL. Stage *j* adds `LOW_PS` or
   `HIGH_PS`, as chosen by clause *j* of that class.
5. The first PDL to finish wins its arbiters up the tree. The root
   arbiter's `completion_o` changes, and `class_o` holds the winner.
6. The asynchronous controller now raises `wait_o` and holds the stage until
   *every* PDL output has made its transition. Only then does `ack` toggle.
   That reopens the latches, and the next `req` toggle can follow
   immediately.

Successive inferences alternate between rising and falling transitions,
because the handshake is two-phase: a toggle of `req` is the request,
whichever way it goes. The signal `done` therefore also tells the arbiters
which direction is in flight. The RTL calls it the *phase*, and phase = 1
means a rising transition.

## The delay element and the PDL

A delay element is one 3-input LUT with truth table `INIT = 8'hCA`, that is
`out = I2 ? I1 : I0`. Both data pins are driven by the previous stage's
output, over two different routes:

| LUT pin | positive clause           | negative clause           |
|---------|---------------------------|---------------------------|
| I0      | high-latency net (`HIGH_PS`) | low-latency net (`LOW_PS`) |
| I1      | low-latency net (`LOW_PS`)   | high-latency net (`HIGH_PS`) |
| I2      | clause output             | clause output             |

A positive clause that fires takes the short path. A negative clause that
fires takes the long one. The two polarities are told apart only by which
net is wired to which pin; the LUT is the same. Logically the element is a
buffer: it carries its information in its delay alone.

Clause *j* is positive for even *j* and negative for odd *j*. For a class
whose positive clauses have *p* outputs at 1 and whose negative clauses have
*n* outputs at 1, the number of short stages is k = p + (N/2 − n). The delay
from the start flip-flop's clock edge to the PDL output is

```
    t_PDL = k · LOW_PS + (N − k) · HIGH_PS
          = N·HIGH_PS − (N/2 + p − n) · (HIGH_PS − LOW_PS)
```

This falls linearly with the class sum p − n. Only the number of short
stages matters, not their positions. The ranking of the classes is the
ranking of their sums, and a tie gives exactly equal delays.

`pdl_sweep_tb` reproduces the characterisation experiment: a 150-element
line swept over Hamming weight 0…150, with net differences of 60 ps and
600 ps. In this model both lines are exactly linear and strictly monotonic.
On silicon, process, voltage and temperature variation bend them a little.
The difference `HIGH_PS − LOW_PS` is the margin that keeps neighbouring sums
in order despite that variation.

## The arbiter and the arbiter tree

Each arbiter node holds two latches, one for each transition direction:

* **Rising:** a cross-coupled NAND SR latch. With both inputs low, both
  NAND outputs are high. The first input to rise pulls its own NAND low,
  which holds the other NAND high. An OR of the two inputs rises at that
  first arrival and is the node's completion.
* **Falling:** a cross-coupled NOR SR latch with an AND of the inputs as
  completion. It works the same way with the levels inverted.

Each latch clears itself while the other direction is in flight, so neither
needs a reset. `phase_i` selects which latch and which completion gate drive
the node outputs. `output_o` = 0 means the upper input came first and 1
means the lower input did, in both phases. The NOR latch's output is
inverted to make that so.

The tree has `tree_leaves(N_CLASSES)` leaves: the next power of two, at
least 2. Leaf *k* carries class `N_CLASSES-1-k`. Spare leaves are tied to
`~phase`, the level the PDL outputs had *before* the current transition, so
they never arrive. Above the first level, an arbiter races the completion
signals of its two children. The root's completion therefore changes at the
earliest PDL arrival.

The winner is decoded from the arbiter outputs. The root output picks a
subtree, and so on down to a leaf. With three classes this gives two
first-level arbiters (classes 2 and 1; class 0 and the constant) under one
root.

**Ties.** Equal class sums arrive at the same instant. In silicon the latch
is then metastable and resolves to one side. In simulation it resolves
deterministically to one side. Either way the answer is one of the tied
classes, which is what an argmax with ties gives.

## The asynchronous stage and its timing assumptions

The **MOUSETRAP stage** (`mousetrap_stage`) is a bit latch for `req` and a
data latch for `x_i`. Both are transparent while `en = XNOR(done, ack)`.

The **controller** (`async_controller`) solves a problem that the fast
completion signal creates: the slower PDLs are still in flight when the
answer is known. The controller is a Muller C-element over all PDL outputs
(the *join*). Its output follows the PDL outputs only once they all agree.
The controller also produces:

* `wait_o = completion XOR join`, which is high from the completion
  transition until the last PDL arrives;
* `ack`, a second C-element of completion and join, which toggles just
  after `wait_o` falls.

The handshake guarantees only the order of these events. Three further
conditions are timing assumptions. The RTL states them as parameters, and
the top checks the last two at elaboration:

1. **Launch alignment.** The start flip-flops of all PDLs are clocked from
   the same clock, so every line launches on the same edge. This design
   assumes the clock arrives at every flip-flop without skew.
2. **Bundled data.** `BUNDLE_PS > CLAUSE_PS`. The start must not reach a
   PDL before the clause outputs, which select its path, have settled.
3. **No late glitches.** `CLAUSE_PS > HIGH_PS − LOW_PS`. This is the subtle
   one. A PDL output has "arrived" when the transition has passed the
   *selected* net of its last element. If that net was the short one, the
   unselected long net still carries the old level for `HIGH_PS − LOW_PS`.
   Once `ack` reopens the latches, new clause outputs travel to the select
   pins. If they arrived inside that window, the LUT would switch to a net
   that has not settled and the PDL output would glitch back. The
   end-to-end testbench hit exactly this glitch while the clause logic was
   modelled as zero-delay. The controller does not enforce this condition;
   it holds because the clause logic is slower than the net difference.

## Sizes

| Parameter (top) | Default | Meaning |
|---|---|---|
| `N_CLASSES` | 3 | classes, one PDL each |
| `N_FEATURES` | 12 | Boolean features |
| `N_CLAUSES` | 10 | clauses per class (even count; half positive) |
| `LOW_PS` / `HIGH_PS` | 375.4 / 641.9 | net delays of a delay element, ps |
| `CLAUSE_PS` | 1000.0 | clause logic delay (this design's choice) |
| `BUNDLE_PS` | 2000.0 | bundling delay (this design's choice) |

The other evaluated sizes, with their net delays, are:

| Model | classes | features | clauses/class | low / high net (ps) |
|---|---|---|---|---|
| Iris | 3 | 12 | 10 | 375.4 / 641.9 (default) |
| Iris | 3 | 12 | 50 | 388.6 / 593.0 |
| MNIST | 10 | 784 | 50 | 402.8 / 603.3 |
| MNIST | 10 | 784 | 100 | 371.1 / 632.1 |

The last three are reached by overriding the parameters, and
`tm_workloads_tb` runs all three. The trained models and data sets are not
part of this RTL, so the testbenches use random sparse models and random
inputs. They check that the answer is the argmax of the class sums, not any
classification accuracy. In those runs the mean latency from request to
acknowledge was about 28 ns (Iris, 50 clauses), 30 ns (MNIST, 50) and 55 ns
(MNIST, 100). The worst cases are 34 ns, 35 ns and 68 ns. Those figures follow from the delay model and the 2 ns
bundling delay, not from hardware measurements.

## Interface of `async_tm_top`

| Port | Dir | Width | |
|---|---|---|---|
| `clk` | in | 1 | free-running clock of the PDL start flip-flops |
| `rst_n` | in | 1 | asynchronous reset, active low; opens the latches and clears controller and flip-flops. Hold it for at least `N_CLAUSES·HIGH_PS` plus one `clk` period, so that any level the delay lines held at power-up has drained out |
| `req` | in | 1 | two-phase request; each toggle starts one inference |
| `x_i` | in | `N_FEATURES` | feature vector, sampled while the latches are open |
| `include_i` | in | `N_CLASSES × N_CLAUSES × 2·N_FEATURES` | model: for class c, clause j, bit f includes x[f] and bit N_FEATURES+f includes ~x[f] |
| `done` | out | 1 | latched request (also the phase) |
| `ack` | out | 1 | two-phase acknowledge; toggles when the inference has finished |
| `en_o` | out | 1 | latch enable |
| `wait_o` | out | 1 | controller wait |
| `completion_o` | out | 1 | root arbiter completion |
| `class_o` | out | `$clog2(N_CLASSES)` | predicted class; valid from the completion transition until the next `req` toggle |
| `pdl_o` | out | `N_CLASSES` | ends of the delay lines |

A batch source toggles `req`, together with new data, after each `ack`
transition. A clause with an empty include mask outputs 0.

## What is modelled and what is synthesizable

* Logic: clause blocks, LUT delay elements, start flip-flops, arbiters
  (cross-coupled gates), the latches and the controller (C-elements as
  latches). All of it is synthesizable. Lint and synthesis report the
  arbiters' cross-coupled gates and the handshake ring as combinational
  loops. They are intended.
* `net_delay` is a **behavioural model** of a routed net. It is a
  transport delay: every input change reappears `DELAY_PS` later. The model
  also samples its input once, 1 ps after start-up, so that it settles
  without a reset. Synthesis sees a plain wire. On an FPGA the
  delays are obtained from the physical flow, not from RTL. That flow has
  three parts. Every delay element is placed at the same site in its own
  logic block, with consecutive elements in adjacent blocks. The two nets
  are locked to the fastest and second-fastest LUT pins. Each net is routed
  with minimum and maximum delay constraints and then fixed. The arbiter
  gates get the same pins and constraints. None of this can be expressed in
  RTL, and it is not included.
* Process variation, metastability resolution time and the delays of the
  arbiter and controller gates are not modelled. Arbiter and controller are
  zero-delay here.

## Choices made in this RTL

These points are not fixed by the source design and were decided here:

* the alternating order of positive and negative clauses;
* the leaf order of the arbiter tree and the decoder;
* the phase multiplexer that merges the rising and falling arbiters, and
  the meaning of `output_o`;
* the gate structure of the controller (two C-elements and an XOR);
* the asynchronous resets;
* the model given as an include-mask input instead of hard-wired clause
  logic;
* the clause and bundling delays (1 ns and 2 ns);
* zero output for empty clauses;
* the 400 MHz clock used by the testbenches.

## Files and simulation

`rtl/`: `tm_pkg` (shared constants), `net_delay`, `delay_element`, `pdl`,
`arbiter`, `arbiter_tree`, `clause_block`, `mousetrap_stage`,
`async_controller`, `async_tm_top`.

`tb/`: one self-checking testbench per module (`<module>_tb`), plus:

* `pdl_sweep_tb`: the 150-element delay sweep;
* `tm_workloads_tb` with its helper `tm_workload_runner`: the larger models.

Every testbench prints `TB_RESULT checks=N failures=M`.

`async_tm_top_tb` runs the default-size design end to end. It does 200
inferences with new random models along the way. It checks the class, the
exact completion and acknowledge times, and the wait period. It also counts
rising and falling inferences, ties, wait periods and data held against a
change of input.

All modules use `timeunit 1ps; timeprecision 100fs`. The simulation needs
Verilator's timing support:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/tm_pkg.sv tb/async_tm_top_tb.sv --top-module async_tm_top_tb
./obj_dir/Vasync_tm_top_tb
```

Any other testbench is run the same way. `tm_workloads_tb` builds the MNIST
sizes, so it takes about ten minutes to compile.
