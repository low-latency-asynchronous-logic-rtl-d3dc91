# Self-timed dual-rail inference datapath for a Tsetlin machine

A Tsetlin machine classifies a Boolean feature vector with logic, not
arithmetic. Each clause is the AND of some features and some inverted
features; which literals take part is set by the machine's trained automata.
Half of the clauses vote for the class and half vote against it. The input
is in the class when the votes for are at least as many as the votes against.

This RTL implements that inference path, for one class, as a self-timed
(clockless) circuit in dual-rail logic. Every bit travels on two wires, and
each new value is separated from the previous one by an empty state, the
*spacer*. So the circuit can tell by itself when a result has arrived, and a
result can arrive early. A clause with one contradicted literal is known to be
false before the other features arrive. A comparison whose top bits differ is
known before the low bits are looked at. The average answer therefore comes
much sooner than the worst case a clock would have to allow for. Because
correctness does not depend on gate delays, the same netlist works across a
wide range of supply voltages: it just gets slower.

The design follows the asynchronous Tsetlin-machine inference datapath of
Wheeldon, Yakovlev, Shafik and Morris ("Low-Latency Asynchronous Logic Design
for Inference at the Edge"). Where that description leaves something open, this
RTL makes its own choice. Those choices are listed near the end of this file
and in each module's header.

## Structure

```
tm_infer_dr                      top: one class, NF features, NC+NC clauses
 |- dr_latch x3                  input latches, one C-element per rail
 |   '- c_element
 |- dr_clause x2*NC              one conjunctive clause
 |   '- dr_partial_clause x NF   mask of one feature and its complement
 |- dr_popcount8 x2              votes for / votes against -> 4-bit count
 |   |- dr_ha x9, dr_or x2, dr_fa x2, dr_spinv x2
 |- dr_mag_cmp                   MSB-first comparator, 1-of-3 result
 |   '- cmp_slice x4
 '- cd_reduced                   completion detection (done)
     '- delay_fall               delay line on the falling edge of done
dr_pkg                           dual-rail and 1-of-3 types
```

Data flows top to bottom: features `f` and exclude actions `e_pos`, `e_neg`
enter through the latches. The clauses produce one vote each. The two
popcounts count the true clauses of each side. The comparator puts the
positive count on its `a` side and the negative count on its `b` side. Its
1-of-3 result `res` (greater, equal or less) is also reduced to the class bit
`cls`, which is true for greater or equal.

The automata that learn the exclude actions are not part of this circuit.
Their actions are primary inputs (`e = 1` means "leave this literal out").

## Dual-rail encoding and the spacer

A dual-rail bit `x` is a pair `{x.t, x.f}` (type `dr_pkg::dr_t`):

| `{t,f}` | meaning |
|---|---|
| `10` | value 1 |
| `01` | value 0 |
| `00` or `11` | spacer (which one depends on the net, see below) |
| the other of `00`/`11` | forbidden |

Each operation is two waves. A *codeword* wave: every input pair goes from
spacer to a value, and each rail changes at most once. Then a *spacer* wave:
everything goes back. All gates are unate (no XOR or XNOR), so every net also
changes at most once per wave. This is what makes the circuit safe against
arbitrary gate delays.

Two kinds of gates appear. Non-inverting gates keep the spacer polarity (the
all-zero spacer stays all-zero). Gates with a single inversion on every path
turn an all-zero spacer into an all-one spacer. The design uses both kinds and
tracks the spacer polarity net by net. This is the least obvious part of the
RTL:

| net | spacer | why |
|---|---|---|
| primary inputs `f`, `e_pos`, `e_neg`; latch outputs | `00` | chosen convention |
| partial clause `pc` | `11` | one AOI22 / OAI22 per rail: one inversion |
| clause output `c` | `00` | AND tree built as NOR / NAND: inverts back |
| half adder, OR, popcount inputs and sum outputs | `00` | non-inverting gates |
| full-adder carry in / carry out | `11` | the full adder's internal inverters |
| popcount output `y[3:0]` | `00` | spacer inverters (`dr_spinv`) after HA8's carry and after FA1's carry |
| comparator result `res` | `000` | 1-of-3 code |

A spacer inverter (`dr_spinv`) swaps the two rails and inverts both. It
keeps a codeword's value and flips the spacer, so it joins nets of opposite
spacer polarity at no logical cost.

The comparator output is not dual-rail. `greater`, `equal` and `less` are
mutually exclusive, so one wire each is enough: a 1-of-3 code whose spacer is
all three low. This saves the logic for three dual-rail outputs. The
single-wire `cls` output is dual-rail again: `cls.t = greater | equal`,
`cls.f = less`.

## The handshake and reduced completion detection

The environment runs a four-phase protocol on `done`:

1. drive a codeword on every input pair;
2. wait for `done = 1`, then read `res` and `cls`;
3. drive all inputs to spacer (`00`);
4. wait for `done = 0`, then start again at 1.

The circuit has two properties that matter here.

**Only codeword arrival is detected.** A full completion detector would
confirm both the arrival of every output and every internal net's return to
spacer. That costs large C-element trees and would also block early
propagation. Here `done` rises when any of the three `res` wires rises: one
OR gate.

**The return to spacer is covered by a timing assumption.** When the inputs
go to spacer, `res` falls quickly. But some internal nets (ones whose early
value was not needed for the output) may still be falling. If the next
codeword came at once, such a late net could mix two operations. So the
falling edge of `done` is delayed by `TD` (`delay_fall`):

    TD = t_int - t_io

`t_int` is the longest codeword-to-spacer time of any internal net, false
paths included. `t_io` is the longest such time from inputs to outputs. Both
come from static timing analysis of the mapped netlist. `done` falls
`t_io + TD` after the spacer is applied. After that the whole circuit is
guaranteed to be spacer again. The default `TD = 200` (simulator time units)
is a placeholder; set it for the target library and corner.

The inputs pass through C-element latches, one per rail (`dr_latch`), whose
enable is `~done`. While `done = 0`, a codeword rail can rise through. Once
`done = 1`, the latch holds the codeword, so inputs that arrive late, after
the answer is already known, cannot disturb it. The latch then lets the
spacer pass. With `done` low again, the latch is ready for the next codeword.
This choice of latch control is this design's own.

## The three stages

### Clause

For feature `m` the exclude actions are `e[2m]`, which masks `f[m]`, and
`e[2m+1]`, which masks `~f[m]`. In single-rail terms the partial clause is
`(f | e[2m]) & (~f | e[2m+1])`. `~f` is free, because it is the negative rail
of `f`. With the negative-gate form, each rail is one complex gate:

    pc.t = ~(f.f & e0.f | f.t & e1.f)          // AOI22
    pc.f = ~((f.t | e0.t) & (f.f | e1.t))      // OAI22

The clause is the AND of the `NF` partial clauses, built on the all-one
spacer:

    c.t = ~|pc.f      // all partial clauses true
    c.f = ~&pc.t      // some partial clause false

`c.f` rises as soon as any one included literal is contradicted. `c.t` can
also rise before every feature has arrived, when the missing features are
excluded in both polarities.

### Population count (8 inputs, 4-bit result)

The counter has nine half adders, two OR gates and two full adders:

- `HA0`..`HA3` add the input pairs.
- For inputs `a0..a3`: `HA4` adds the two sums and `HA5` the two carries. The
  4-input count is `{HA5.c, HA4.c | HA5.s, HA4.s}`. The OR works because
  `HA4.c` and `HA5.s` are never both 1. `HA6`, `HA7` and the second OR do the
  same for `a4..a7`.
- `HA8` adds the two weight-1 bits, giving `y0`. `FA0` adds the two weight-2
  bits with HA8's carry, giving `y1`. `FA1` adds the two weight-4 bits with
  FA0's carry, giving `y2`. FA1's carry is `y3`.

The full adders keep their carries on the all-one spacer. A spacer inverter
sits between `HA8` and `FA0` and another between `FA1` and `y3`. The carry of
the full adder is a majority function, so it propagates without waiting for
carry-in when `a` and `b` agree.

### Magnitude comparator

Four slices (`cmp_slice`) compare bit pairs from the MSB down. The MSB
slice's request `eval` is tied to 1. A slice raises `gt` or `lt` if its bits
differ, or `eq` if they are equal. `eq` is the request for the next slice.
The first differing bit ends the comparison, and the lower slices are never
asked. `greater` is the OR of all `gt` outputs, `less` the OR of all `lt`
outputs, and `equal` is the last slice's `eq`. The number of slice delays is
one plus the number of equal leading bits, not always four.

## Parameters

| module | parameter | default | origin |
|---|---|---|---|
| `tm_infer_dr`, `dr_clause` | `NF` features per clause | 16 | own choice; not fixed by the source design |
| `tm_infer_dr` | `NC` clauses per side | 8 | eight-input popcount; 1..8 allowed, missing votes read as 0 |
| `dr_mag_cmp` | `W` bits | 4 | 4-bit counts |
| `tm_infer_dr`, `cd_reduced`, `delay_fall` | `TD` done fall delay | 200 | placeholder, from timing analysis |
| `dr_latch` | `W` rail pairs | 8 | set by the top |

The popcount is fixed at eight inputs, as in the source design. More than
eight clauses per side would need a wider counter, which is not provided.

## How far to trust it, and where it departs

Following the source design: the clause circuit (its input grouping and the
single inversion per path), the popcount structure and its spacer inverter
positions, the request-driven MSB-first comparator with its tied-high MSB
request and 1-of-3 output, reduced completion detection with a delayed
falling `done`, dual-rail inputs and outputs, and C-elements as input latches.

This design's own choices:

- the AND tree inverts the spacer back to `00`, so that clause outputs meet
  the popcount on the same spacer as the primary inputs;
- the gate equations of the half adder, full adder, comparator slice and
  spacer inverter. In particular, the full adder here is four AND-OR terms
  plus four inverters. The source design uses six complex and two simple
  gates whose equations are not published.
- the C-element latch control (`en = ~done`) and the reset `rst`, which
  clears every latch to spacer;
- `NF = 16` and `TD = 200`;
- positive votes on the comparator's `a` input; ties count as "in the class".

What the RTL does not model: gate delays. Every block is zero-delay logic
except `delay_fall`, which is a behavioural model of a delay line and not
synthesizable. Latency, throughput and the voltage-scaling behaviour belong
to a mapped netlist with real cell delays. So does the check that `TD`
covers `t_int - t_io`. `c_element` is written as a level-sensitive latch that
a flow maps to a C-element cell. A synthesis tool reports it as a latch,
which is intended, and Verilator's lint notes that it does not recognise the
construct as one.

The RTL does check the logic-level rules. The testbenches exercise every
codeword/spacer sequence, check early propagation (results valid while some
inputs are still spacer, and never wrong), and check the grace period on
`done`. Assertions flag the forbidden `11` state on inputs and latched
actions, any result that is not 1-of-3, and any input rail that falls before
`done` has risen (the environment may return to spacer only after the result
has been acknowledged).

## Simulation

Every block has a self-checking testbench `tb/tb_<module>.sv` that prints
`TB_RESULT checks=N failures=M`. The end-to-end test `tb_tm_infer_dr` runs
the top at its default size for 400 operations. For each operation it picks
the number of true clauses on each side and builds exclude actions to match.
Half of the operations apply the exclude actions first and then the features
one by one in random order. The other half apply all 528 input pairs one at a
time in a fully random order, and withdraw them in random order too. After
every single input change, the outputs must be either spacer or the final
answer: a dual-rail circuit built from unate gates must never show a wrong
intermediate value. The test checks the result and class against a
single-rail model, and the `done` grace period. It also counts how often each
comparator exit bit, each outcome, early completion (before the last input
arrived) and the delayed fall of `done` occurred, and fails if any of them
never did.

With Verilator 5 (timing support is needed for the handshake and the delay
model):

```
verilator --binary --timing --assert -Irtl rtl/dr_pkg.sv tb/tb_tm_infer_dr.sv \
    -y rtl --top-module tb_tm_infer_dr -Mdir obj_tm
./obj_tm/Vtb_tm_infer_dr
```

Replace `tm_infer_dr` by any other module name to run that block's test. The
simulator is two-state, so the testbenches reset the latches (`rst`) and
drive every input before reading any output.
