# Early output hybrid input encoded asynchronous adder

This is the RTL of a clockless ripple carry adder. The operands use
delay-insensitive codes, and the 4-phase return-to-zero handshake drives
each addition. Each bit position is a full adder that has two properties:

* **Hybrid input encoding.** The two operand bits arrive as dual-rail
  signals. A small encoder then merges them into one 1-of-4 code: exactly
  one of four wires is high, naming the pair (A,B). The carry, sum and carry
  out stay dual-rail.
* **Early reset.** A stage drives its sum and carry out back to the spacer
  (all wires low) as soon as its own operands return to the spacer. It does
  not wait for its carry input. A stage whose operands generate or kill a
  carry also produces its carry out without waiting for the carry input.

Because of these two properties, the data-phase latency depends on the data:
the carry ripples only through runs of propagate bits. The reset-phase
latency is that of a single stage, whatever the width. The price is one
small timing assumption between neighbouring stages, described below.
The design follows P. Balasubramanian and K. Prasad, "Early Output Hybrid
Input Encoded Asynchronous Full Adder and Relative-Timed Ripple Carry Adder".
This RTL is an independent transcription of that paper, not the authors'
code.

## Codes

| signal | wires | valid data | spacer | invalid |
|---|---|---|---|---|
| one bit W (dual-rail) | `r1`, `r0` | `10` = 1, `01` = 0 | `00` | `11` |
| two bits (A,B) (1-of-4) | `e[3:0]` | `e[0]`: 00, `e[1]`: 01 (A=0,B=1), `e[2]`: 10, `e[3]`: 11 | `0000` | more than one high |

`async_pkg` defines `dual_rail_t` (a packed struct `{r1, r0}`) and
`one_of_4_t`, plus the helper `dr_encode()`, which the testbenches use.

Every channel alternates between the spacer and valid data. A sender raises
valid data, waits for the acknowledge, drops everything to the spacer, and
waits for the acknowledge to fall.

## The C-element

All state in the design lives in 2-input Muller C-elements (`c_element`). A
C-element's output goes to 1 when both inputs are 1 and to 0 when both are 0.
While the inputs disagree, it keeps its value. In standard cells the paper
builds it as an AO222 gate with feedback. Here it is written as an
`always_latch` that sets on 11 and clears on 00. This has the same steady
states and avoids a combinational loop. Synthesis therefore reports one latch
bit per C-element, and that latch is intended.

## Encoder (`dr_to_1of4_encoder`)

The encoder uses four C-elements, one for each pairing of an A rail with a B
rail:

```
e[0] = C(A0,B0)   kill       e[1] = C(A0,B1)   propagate
e[2] = C(A1,B0)   propagate  e[3] = C(A1,B1)   generate
```

An `e` line rises only when both operands are valid. It falls only when both
have returned to the spacer. So the encoder's own output acknowledges both
operands.

## Full adder (`eo_full_adder`)

The full adder implements these four equations:

```
SUM1  = (E1+E2)·CIN0 + (E0+E3)·CIN1      SUM0  = (E1+E2)·CIN1 + (E0+E3)·CIN0
COUT1 = (E1+E2)·CIN1 + E3                COUT0 = (E1+E2)·CIN0 + E0
```

The gates below realise them:

| gate | cell | function |
|---|---|---|
| OR1 | OR2 | `int1 = E0 \| E3` — kill or generate: sum equals the carry in |
| OR2 | OR2 | `int2 = E1 \| E2` — propagate: sum is the inverted carry, carry out equals the carry in |
| OR3 | OR2 | `int3 = int1 \| int2` — some operand code is present |
| CG1 | AO22 | `isum1 = CIN1·int1 + CIN0·int2` |
| CG2 | AO22 | `isum0 = CIN0·int1 + CIN1·int2` |
| CG3 | AO21 | `COUT1 = CIN1·int2 + E3` |
| CG4 | AO21 | `COUT0 = CIN0·int2 + E0` |
| C1, C2 | C-element | `SUM1 = C(isum1, int3)`, `SUM0 = C(isum0, int3)` |

Every product term contains an operand line (an E line or an int line), and
no two terms of one output can be true together. So in every phase at most
one term drives each output, and each wire switches at most once. This
monotonic behaviour keeps the circuit free of hazards.

In the three modes:

* **Propagate** (E1 or E2): `int2` and `int3` rise. Then the carry in
  selects the sum rail through CG1 or CG2, and the carry out rail through
  CG3 or CG4.
* **Generate** (E3) and **kill** (E0): CG3 or CG4 fires directly from E3
  or E0, so the carry out is valid before the carry in arrives. The sum
  still waits for the carry in.
* **Return to zero:** when the operands return to the spacer, `int1`,
  `int2`, `int3` and E0..E3 all fall. Every term of every output then goes
  to 0, whatever the carry in is doing, and C1/C2 clear because `int3` and
  the isum term are both low. This is the early reset. The C-elements on
  the sum keep the sum from dropping while `int3` is still high.

## Ripple carry adder (`rt_rca`) and the relative-timing assumption

`rt_rca #(N)` chains N stages. Each stage has its own encoder, and
`cout[i]` feeds `cin[i+1]`. The default is N = 32, the width for which the
paper reports results.

Early reset creates a hazard. Stage i may already have reset while its carry
input, which is the previous stage's carry out, is still high. Suppose
stage i+1's sum resets through its own operands before that carry falls.
Then the carry's later fall is a transition that nothing downstream ever
observes: a gate orphan. The design accepts this and requires a timing
constraint instead: **the internal carry `cout[i]` must return to zero
before `sum[i+1]` does.** The constraint involves only two adjacent stages,
so it does not grow with N.

With minimum-size 32/28 nm cells, the paper estimates the two paths as
follows:

* The direct path (OR → AO22 → C-element) is 0.238 ns.
* The path through the incoming carry (OR → AO21 → AO22 → C-element) is
  0.301 ns.

Meeting the constraint therefore takes 0.063 ns, which faster cells on the
carry logic can win back. The primary carry input has no such problem: the
completion detector of the stage that drives the adder sees it return to
zero.

**This RTL has no delays, so it can neither express nor check the
constraint.** A physical implementation must enforce it in timing analysis,
and must keep the gate structure above intact: a synthesis tool that
restructures the AND/OR terms can destroy the monotonic behaviour.

## Completion detection and the top level (`eo_rca_top`)

`completion_detector #(W)` has one OR gate per dual-rail signal, and a
balanced tree of C-elements (`c_element_tree`) combines their outputs. Its
`done` output rises once all W signals are valid and falls once all are
spacer.

`eo_rca_top #(N = 32)` wraps the adder with two such detectors:

* `in_done` watches `a`, `b` and `cin` (2N+1 signals). This is the detector
  the paper places in the stage that precedes the adder. It acknowledges the
  carry in, which may return to zero later than the operands.
* `out_done` watches `sum` and `cout` (N+1 signals). It is the acknowledge a
  receiver would return.

Putting both detectors in one top level is a choice of this RTL: the paper
shows the adder alone.

A sender should do the following:

1. Drive `a`, `b` and `cin` valid, in any order.
2. Wait for `out_done`.
3. Drop the inputs to the spacer.
4. Wait for `out_done` and `in_done` to fall.

In the test, `out_done` falls as soon as the operands reach the spacer, even
though `cin` is still valid, while `in_done` waits for `cin`.

## Departures from the paper and limits

* The C-element is a set/reset latch, not an AO222 with feedback. The
  function is the same.
* The OR/AO gates are behavioural `always_comb` logic, not instantiated
  cells.
* The relative-timing constraint and the paper's timing, area and power
  results are not modelled. Those results are a 32-bit forward latency of
  3.02 ns, a cycle time of 3.11 ns, an area of 1935.30 µm² and a power of
  2173 µW. All of them depend on the 32/28 nm cell library.
* Which internal line feeds each AND input of CG1–CG4 comes from the
  equations. The paper's schematic confirms the gate names and the signal
  names at the outputs.
* The tree shape of the completion detector and the two-detector top level
  are this design's own choices.
* There is no reset pin. The circuit starts correctly once every input is
  held at the spacer, which sets every C-element to 0.

## Files

| file | content |
|---|---|
| `rtl/async_pkg.sv` | code types and helpers |
| `rtl/c_element.sv` | 2-input C-element |
| `rtl/c_element_tree.sv` | C-element tree (helper) |
| `rtl/dr_to_1of4_encoder.sv` | dual-rail to 1-of-4 encoder |
| `rtl/eo_full_adder.sv` | early output full adder |
| `rtl/rt_rca.sv` | N-bit relative-timed ripple carry adder |
| `rtl/completion_detector.sv` | OR array + C-element tree |
| `rtl/eo_rca_top.sv` | adder with input and output completion detection |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_fig2_example` |

## Simulation

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself,
with a watchdog in case a handshake hangs. For example, for the full design
at its default 32 bits:

```
verilator --binary --timing --assert -Irtl rtl/async_pkg.sv \
  rtl/c_element.sv rtl/c_element_tree.sv rtl/dr_to_1of4_encoder.sv \
  rtl/eo_full_adder.sv rtl/rt_rca.sv rtl/completion_detector.sv \
  rtl/eo_rca_top.sv tb/tb_eo_rca_top.sv --top-module tb_eo_rca_top
./obj_dir/Vtb_eo_rca_top
```

What each testbench does:

* **`tb_eo_rca_top`** runs 1100 random 32-bit additions through the full
  handshake, one every 20 time units. Every tenth addition is
  all-propagate, so the carry ripples across the full width. It checks
  every sum and carry against integer arithmetic. It counts propagate,
  generate and kill stages, early carry outs, early resets, and cases where
  `in_done` waited for a late carry in, and it fails if any of these never
  happened.
* **`tb_rt_rca`** (N = 8) makes the inputs valid one at a time in random
  order. After every step it checks that each output is either the spacer
  or its final value, never a wrong value.
* **`tb_fig2_example`** replays a 2-bit example with both stages in
  propagate mode, including the early reset with the carry in still valid.
