# A dual-rail self-timed adder stage with local or global weak indication

A self-timed (clockless) pipeline stage knows that its function block has
finished from the data itself. Each bit is sent on two wires, and a
completion detector watches for the moment when every bit has arrived. That
only works if the function block is *indicating*: its outputs must not all
be complete before all of its inputs have arrived, and they must not all
return to rest before all of its inputs have returned to rest. Otherwise a
late input transition could still be travelling through the logic when the
next stage already believes the work is done.

A *weakly* indicating block keeps that promise with at least one output and
lets the others run ahead. This is what makes a self-timed ripple carry
adder fast on average. A carry that is generated or killed inside the chain
does not wait for the carries below it, so the delay follows the longest
carry *propagation* run `m`, not the word width `n`.

There are two places where the promise can be kept:

* **Local weak indication.** The adder cells themselves are weakly
  indicating. Every full adder's sum waits for all three of its inputs.
  The stage forwards all adder outputs straight to the next register.
* **Global weak indication.** The adder cells are *early output* cells. Any
  output, including the sums, may appear (and reset) after only some of the
  inputs. The stage restores indication with one extra gate pair, the
  *synchronizer*. It holds back the adder's carry overflow until the
  completion detector on the adder *inputs* has seen a full codeword, and
  holds it valid until that detector has seen a full spacer.

This RTL implements a 32-bit adder stage in both styles. A parameter selects
the style. The global style needs fewer and smaller gates and has slightly
lower forward latency. The local style has the shorter *cycle time*
(forward plus reset latency), which sets the throughput. The reason is the
synchronizer. A global stage cannot finish its reset before its input
completion detector has, which takes a fixed eight logic levels. A local
stage's adder resets in a constant three or four gate delays, whatever the
word width.

## Dual-rail data and the 4-phase protocol

A logical bit `X` travels on the rails `(X1, X0)`:

| X1 X0 | meaning |
|---|---|
| 0 0 | spacer (no data) |
| 1 0 | valid 1 |
| 0 1 | valid 0 |
| 1 1 | illegal |

`dr_pkg::dr_t` is this pair (`r1`, `r0`). Words alternate strictly between
data and spacer ("return to zero"):

1. The sender waits for `ackout = 0`, then drives a codeword.
2. The stage's input completion detector raises `ackout` once every bit is
   valid.
3. The sender drives the spacer.
4. `ackout` falls once every bit is spacer. The transaction is complete.

Every acknowledge reaches the register *before* it in inverted form, as that
register's `ackin`.

## The stage (`st_stage`)

```
                 ~next_ackout (ackin)                       ~following_ackout (ackin)
                        |                                            |
in_a, in_b, in_cin -> [current stage register] --> [adder] --sums---> [next stage register] --> out_sum, out_cout
                        |                           |                ^            |
                        |                           +--carry--> [synchronizer] ---+  (GLOBAL; LOCAL: wire)
                        v                                        ^               |
               [completion detector] ----- ackout --------------+               v
                        |                                              [completion detector]
                        +--> ackout (to sender)                                  |
                                                                                 +--> next_ackout
```

* **Current stage register** (`stage_register`, 65 dual-rail bits: A, B,
  carry in). It has one C-element per rail, and the other input of each
  C-element is the register's `ackin` = `~next_ackout`. A rail can rise
  only while the next stage is empty and fall only after the next stage has
  taken the word. So the register refuses a new word while the previous
  result is still unread (backpressure).
* **Input completion detector** (`completion_detector`, `WIDTH=32,
  OPERANDS=2`). Logic level 1 ORs each rail pair. Levels 2 to 6 are a
  balanced tree of 2-input C-elements per operand (32 to 1). Level 7 joins
  A and B, and level 8 joins the carry input. The output `ackout` goes to
  the sender and, in global mode, to the synchronizer.
* **Adder.** In `LOCAL` mode it is `wi_rca`, a chain of 32
  `wi_full_adder`. In `GLOBAL` mode it is `eo_rca`, a chain of 32
  `eo_full_adder`.
* **Synchronizer** (`synchronizer`, `GLOBAL` only). It consists of
  `COUT1 = C(ICOUT1, ackout)` and `COUT0 = C(ICOUT0, ackout)`. The sums
  bypass it.
* **Next stage register** (33 bits: 32 sums and the carry) with its own
  completion detector (`OPERANDS=1`: the 32 sums in a tree, then the
  carry). Its `ackin` is `~following_ackout`, which the stage after it
  supplies.

### Ports

| port | dir | type | meaning |
|---|---|---|---|
| `rst_n` | in | logic | asynchronous clear of every C-element, active low |
| `in_a`, `in_b` | in | `dr_t [WIDTH-1:0]` | operands from the sender |
| `in_cin` | in | `dr_t` | carry input from the sender |
| `ackout` | out | logic | input completion, to the sender |
| `out_sum` | out | `dr_t [WIDTH-1:0]` | sums held in the next stage register |
| `out_cout` | out | `dr_t` | carry overflow held in the next stage register |
| `next_ackout` | out | logic | completion of the next stage register |
| `following_ackout` | in | logic | acknowledge from the consumer of the results |

| parameter | default | meaning |
|---|---|---|
| `WIDTH` | 32 | adder width `n` |
| `MODE` | `LOCAL` | `LOCAL` or `GLOBAL` weak indication (`dr_pkg::indication_e`) |

There is no clock. `rst_n` must be low until all inputs are spacer and
`following_ackout` is 0.

## The two full adders

Both adders compute the same dual-rail sum, factored as

```
SUM1 = (A0B0 + A1B1)·CIN1 + (A0B1 + A1B0)·CIN0
SUM0 = (A0B0 + A1B1)·CIN0 + (A0B1 + A1B0)·CIN1
```

They differ in which gates hold state, and so in what they indicate.

**`wi_full_adder` (local).** The four operand products are C-elements:
`k = C(A0,B0)`, `g = C(A1,B1)`, `p01 = C(A0,B1)` and `p10 = C(A1,B0)`.
They form `p = p01|p10` and `e = k|g`. The sum is built from four more
C-elements with the carry input and two ORs. So a sum rail rises only after
A, B and CIN have all arrived, and falls only after all three have left.
The carry uses AO21 gates:

```
COUT1 = p·CIN1 + g        COUT0 = p·CIN0 + k
```

On generate or kill the carry appears from A and B alone. On propagate it
waits for CIN. In either case it resets as soon as A and B are spacer,
without waiting for CIN. Carry propagation costs one AO21 per bit, and the
reset of the whole chain costs a constant number of gates.

**`eo_full_adder` (global).** The operand products are AO22 gates with no
memory: `CG1 = A0B0 + A1B1` and `CG2 = A0B1 + A1B0`. Four C-elements C1 to
C4 combine them with CIN and feed two ORs. The carry uses two AO22 gates:

```
CG3: COUT1 = CG2·CIN1 + A1B1     CG4: COUT0 = CG2·CIN0 + A0B0
```

Because CG1 and CG2 forget as soon as one operand rail falls, the whole
adder can reset once A (or B) and CIN are spacer, while B (or A) is still
valid ("early reset"). Its carry output never waits for CIN on generate or
kill, and never indicates CIN. Hence the synchronizer.

The difference shows in the full-adder testbenches. Take A and CIN back to
spacer while B stays valid. `wi_full_adder` keeps its sum valid, because
the sum still indicates B. `eo_full_adder` has already returned everything
to spacer.

## Why the two styles differ in cycle time

A zero-delay simulation cannot show delays. The gate-count argument behind
the design choice is the following.

* Local forward path: register C-element, then C + OR + AO21 in bit 0, then
  `m` AO21 gates, then C + OR for the top sum. The reset path is the same
  without the `m` term.
* Global forward path: register C-element, two AO22 gates, then `m` AO22
  gates, then C + OR. In parallel runs the synchronizing path: register
  C-element, OR, seven C-element levels of the detector, and the
  synchronizer C-element (ten gates).
* In global mode the reset cannot be faster than the synchronizing path,
  because the carry output stays held until `ackout` falls. On valid data
  the synchronizing path also dominates whenever the longest propagation
  run is short (about `m ≤ 8` with typical 28 nm cell delays).

With typical delays of a 28 nm standard cell library, the two cycle times
come out at about `63·m + 1002` (local) and `72·m + 1430` (global). The
published plot labels these values nanoseconds. Their size, about 1250 to
3450 for `m` = 4 to 28, only fits gate delays if the unit is picoseconds.
For `m` from 4 to 28 bits the local stage is about 22 % faster
on average. The global stage's advantages are fewer, smaller cells and a
slightly shorter worst-case forward latency. They concern area and latency,
not throughput.

## Modules

| file | role |
|---|---|
| `rtl/dr_pkg.sv` | `dr_t`, `indication_e`, `SPACER`, encode/test helpers |
| `rtl/c_element.sv` | 2-input Muller C-element, `Z = XY + (X+Y)Z`, with clear |
| `rtl/c_tree.sv` | heap-ordered binary tree of C-elements (N inputs to 1) |
| `rtl/stage_register.sv` | C-element pipeline register, one cell per rail |
| `rtl/completion_detector.sv` | OR level, per-operand C-trees, join, extra bit |
| `rtl/wi_full_adder.sv`, `rtl/wi_rca.sv` | weak-indication adder cell and chain |
| `rtl/eo_full_adder.sv`, `rtl/eo_rca.sv` | early output adder cell and chain |
| `rtl/synchronizer.sv` | C-element pair holding the carry against `ackout` |
| `rtl/st_stage.sv` | the stage, top level |

### The C-element in RTL

`c_element` is written as a level-sensitive latch: when `a == b` the output
takes `a`, otherwise it holds. This is the same state function as the
usual realisation, an AO222 gate with its output fed back. Synthesis maps
it to a latch plus an equality gate. For silicon, replace the module body
by the library's C-element or the AO222-with-feedback cell, and keep every
gate of the adders as written. The input-incomplete AO21/AO22 gates and the
placement of the C-elements *are* the indication properties, so a logic
optimiser must not restructure them. Forks that feed both the adder and the
completion detector (register outputs, the `ackout` net) are assumed
isochronic, as in any quasi-delay-insensitive design.

Lint tools report the stage as containing combinational loops. The loop is
the handshake: next register, its completion detector, `~next_ackout`,
current register, adder, next register. Every element on it that can hold
state is a C-element, and the loop settles after each input change.

## Simulation

All testbenches are self-checking and print
`TB_RESULT checks=N failures=M`. They advance time with `#1` steps, so
the simulator needs timing support. With Verilator:

```
verilator --binary --timing -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/dr_pkg.sv tb/tb_st_stage.sv --top-module tb_st_stage
./obj_dir/Vtb_st_stage
```

| testbench | what it checks |
|---|---|
| `tb_c_element` | copy-when-equal / hold, reset, 2000 random steps against a reference |
| `tb_stage_register` | data passes only with `ackin=1`, spacer only with `ackin=0`, random per-rail check |
| `tb_completion_detector` | bits arriving and leaving one at a time in random order; `ackout` changes only on the last one (both detector shapes) |
| `tb_wi_full_adder`, `tb_eo_full_adder` | all 8 inputs in three arrival and three departure orders; early carry, indication, early reset |
| `tb_wi_rca`, `tb_eo_rca` | 1200 32-bit additions: which sum bits may be valid before CIN arrives, exact results, reset not rippling |
| `tb_synchronizer` | carry held until `ackout`, held during reset until `ackout` falls |
| `tb_st_stage` | 1200 transactions through a LOCAL and a GLOBAL 32-bit stage, with every handshake step checked |
| `tb_st_stage_full` | the default stage (32-bit, LOCAL, no overrides) through the same 1200 transactions |
| `tb_stage_indication` | both stages with inputs arriving and leaving one bit at a time in random order and an eager consumer: `next_ackout` must rise exactly on the last arrival and fall exactly on the last departure |
| `tb_carry_chains` | both adders with carry propagation runs of exactly 4 to 28 bits: which sum bits wait for the carry input |

The stage environment `tb/st_env.sv` applies A and B before the carry input
and takes them back to spacer before it. The receiver is deliberately slow,
and about one transaction in four the sender offers its next word before the
result has been taken. The environment counts each mechanism and fails if
one never occurs:

* a carry produced before the carry input;
* in GLOBAL mode, the same carry withheld by the synchronizer;
* a carry that must wait for the carry input (all 32 bits propagate);
* propagation runs longer than 8 bits;
* early reset of the adder carry;
* in GLOBAL mode, the synchronizer holding the carry through reset;
* a result held for the slow receiver;
* the sender blocked by a full next stage.

A quarter of the operand pairs propagate on every bit, and a quarter
generate or kill on exactly one bit, so long carry runs are well covered.

`tb_stage_indication` shows what the synchronizer is for. When input bits
leave one at a time, the early output adder regularly returns *all* of its
outputs to spacer while some input bits are still valid. Only the held
carry keeps the next stage from seeing a complete spacer too early. If the
synchronizer is replaced by a wire, the next stage register accepts the
following word on top of stale rails, and an illegal (1,1) code appears.
The assertion in `st_stage` reports it.

## What is and is not specified by the source design

Taken from the published design:

* the stage structure, with its registers, detectors and optional
  synchronizer;
* the completion detector's eight-level shape;
* the 32-bit ripple carry width;
* the early output full adder gate by gate;
* the sum network and the factored carry equations of the weak-indication
  adder;
* the synchronizer.

Choices made here:

* **`wi_full_adder` carry network.** The weak-indication cell of the local
  stage is only cited in the source. Its gate-level carry logic, AO21 gates
  fed by the C-element products, is reconstructed from its carry equations
  and from the gate delays quoted for its critical path. Its sum network is
  the C-element/OR structure of the biased-style cell.
* **Next-stage completion detector.** It is drawn only as a box. Here it is
  the same detector over 32 sums plus the carry.
* **Reset.** There is no reset in the source. Every C-element here has an
  asynchronous active-low clear so that the stage starts in the spacer
  state.
* **Default mode.** `MODE` defaults to `LOCAL`, the style preferred on
  throughput. Both modes are complete and tested.
* **Timing, power and area.** The RTL has no delays. The nanosecond
  latencies, microwatt powers and square-micron areas of the 28 nm
  implementation, and the cycle-time curves, cannot be reproduced at this
  level. The counts above only show that the behaviours behind them occur.
* **Other adders.** The strong-indication (DIMS), basic weak-indication and
  transistor-level (Martin) full adders are only background alternatives
  and are not included.
