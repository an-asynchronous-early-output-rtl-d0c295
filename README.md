# A relative-timed dual-rail ripple carry adder

This is RTL for a 32-bit asynchronous ripple carry adder (RCA). It has no
clock. Every bit travels on two wires, and every operation is framed by a
four-phase handshake. Its speed comes from one idea. The full adder cell
releases its outputs back to the idle state as soon as its own operands
leave, without waiting for its carry input. So the return to idle, which is
half of every cycle, takes one full-adder delay whatever the width. The
price is a small timing assumption between two neighbouring cells. The
assumption is not checked by logic, so this design is called *relative-timed*.

The RTL covers:

- the full adder cell;
- the 32-bit cascade;
- the asynchronous pipeline stage around it, with input register, output
  register and completion detectors.

It is written as gate-level SystemVerilog. Every gate is one continuous
assignment, and every state-holding element is a Muller C-element.

## 1. Dual-rail data and the four-phase handshake

A logical bit `X` is carried by two rails, `X.r1` and `X.r0` (type `dr_t` in
`dr_pkg`):

| r1 | r0 | meaning |
|----|----|---------|
| 0  | 0  | spacer (no data) |
| 1  | 0  | valid 1 |
| 0  | 1  | valid 0 |
| 1  | 1  | illegal, never produced |

A bus alternates between a valid word and the all-spacer word. The
receiver acknowledges each one, so a complete transfer has four phases:

1. the word appears;
2. the acknowledge rises;
3. the spacer appears;
4. the acknowledge falls.

A receiver knows a word has fully arrived when every bit is valid. It knows
the spacer has fully arrived when every bit is spacer. No clock or matched
delay is needed for this.

The **Muller C-element** (`c_element`) is the storage element throughout.
Its output copies the inputs when they agree and holds when they differ. It
is modelled as the usual majority gate with its output fed back:
`y = ab + ay + by`. Lint and synthesis tools report each of these feedback
loops as a combinational loop. That is expected: the loops are the
circuit's state. There is no other loop and no clock anywhere.

## 2. The early output full adder (`eo_full_adder`)

Eleven gates, named as in the original schematic:

| gate | function | role |
|------|----------|------|
| CG1  | `net1 = a0·b0 + a1·b1` | a and b equal |
| CG2  | `net2 = a0·b1 + a1·b0` | a and b differ (propagate) |
| AND1 | `net4 = a1·b1` | generate |
| AND2 | `net5 = a0·b0` | kill |
| OR   | `net3 = net1 + net2` | both operand bits present |
| CG3  | `asum1 = net1·cin1 + net2·cin0` | sum true rail, unlatched |
| CG4  | `asum0 = net1·cin0 + net2·cin1` | sum false rail, unlatched |
| CG5  | `cout1 = net2·cin1 + net4` | carry true rail |
| CG6  | `cout0 = net2·cin0 + net5` | carry false rail |
| CE1  | `sum1 = C(asum1, net3)` | sum true rail |
| CE2  | `sum0 = C(asum0, net3)` | sum false rail |

These are the factorised dual-rail sum and carry equations. A few
properties follow from them.

- **Carry is early on generate and kill.** When `a = b`, the carry output
  becomes valid from `net4` or `net5` alone, before the carry input
  arrives. Only a propagating bit (`a != b`) waits for its carry input. In
  a chain of adders, the carry therefore ripples only through runs of
  propagating bits.
- **The sum always waits for all three inputs.** `asum` needs `net1` or
  `net2` (both operands) and a carry rail. The sum rails are therefore a
  full indication of the cell's inputs in the valid phase.
- **Reset is early.** When `a` or `b` returns to spacer:
  - `net1`, `net2`, `net4` and `net5` fall;
  - so the carry output and `asum` fall;
  - `net3` falls, which lets the C-elements release the sum.

  None of this waits for the carry input to become spacer. This is what
  makes the spacer phase fast.
- **`net3` on the C-elements keeps the sum from falling too soon.** A sum
  rail cannot fall while both operand bits are still present. So the sum
  does acknowledge the cell's own operands in the spacer phase, just not
  its carry input.

The gate types for the carry gates: the description of the cell calls CG1
to CG5 AO22 (two 2-input ANDs into an OR) and CG6 AO21. The schematic, the
critical path analysis and the gate-level equations all give CG5 the same
three-input form as CG6 (AO21). This RTL follows the equations. The
Boolean function is the same whichever cell is used.

## 3. The relative-timing assumption (`rt_rca`)

`rt_rca` chains N cells (default 32). Cell k's carry output is cell k+1's
carry input: `carry[k+1]`, with `carry[0] = cin` and `cout = carry[N]`.

Because every cell resets early, cell k+1 never waits for `carry[k+1]` to
become spacer. Take a cell k+1 whose sum was set through its carry input,
for example a propagate with `cin1` high. When its operands leave, two
things race:

- **direct path:** the operands clear `net1/net2`, then `asum`, then the sum
  C-element releases. This is three cells.
- **indirect path:** the same operand change in cell k clears `net2`, then
  `carry[k+1]`, then cell k+1's `asum`, then the C-element. This is four
  cells.

A rail of `carry[k+1]` that is still high when cell k+1's sum has already
returned to spacer is a transition nobody acknowledges. A *wire orphan* of
this kind could later glitch a sum when the next word arrives. Hence the
assumption:

> **`carry[k+1]` must be spacer before the sum of cell k+1 is spacer.**

Some facts about it:

- It holds when all operand wires of the adder return to spacer at about
  the same time. The stage meets this when its sender resets the whole bus
  at once (section 4).
- It involves only two neighbouring cells, so it does not get harder as N
  grows.
- With equal gate delays it holds. The carry falls two cell delays after
  the operands, the sum three.
- It fails only if the operands of cell k leave much later than those of
  cell k+1. No gate in this design checks it.

The cascade testbench carries a monitor on every internal carry that fails
the test if the assumption is ever broken. The timed stage testbench carries
the same monitor, with the adder fed from the stage register by a 4-phase
sender and receiver.

## 4. The pipeline stage (`rt_rca_stage`, top)

```
 sender                                                           receiver
 a_in,b_in,cin_in -> [u_reg_cur] -> rt_rca -> [u_reg_nxt] -> sum_out,cout_out
                          ^   |                    ^   |
                ackin_cur |  u_cd_cur    ackin_nxt |  u_cd_nxt
                          |   |                    |   |
 ackout_cur <-------------|---+        ackout_rx -inv  +------> ackout_nxt
                          +-----------inv--------------+
```

- `dr_register` is one C-element per rail, joining the incoming rail with
  the register's `ackin`. It passes a valid word while `ackin = 1` and the
  spacer while `ackin = 0`. Otherwise it holds what it has.
- `completion_detector` ORs the two rails of each bit and joins all bits in
  a balanced tree of 2-input C-elements. Its output rises when every bit is
  valid and falls when every bit is spacer.
- The acknowledge of the next stage, inverted, is the `ackin` of the
  previous register.

One transfer, seen at the ports:

1. The sender drives a word on `a_in/b_in/cin_in`.
2. The word passes `u_reg_cur` (its `ackin` is 1, because the output side
   is empty). `u_cd_cur` raises `ackout_cur`.
3. The adder computes. The result passes `u_reg_nxt`, and `u_cd_nxt` raises
   `ackout_nxt`. So `ackin_cur` falls: `u_reg_cur` keeps its word until the
   spacer comes, and takes no new word.
4. The sender, seeing `ackout_cur = 1`, drives the spacer. The receiver,
   seeing `ackout_nxt = 1`, takes the result and raises `ackout_rx`.
5. The spacer passes `u_reg_cur` (its `ackin` is 0). `ackout_cur` falls and
   the adder returns to spacer, one full-adder delay later.
6. Once `ackout_rx = 1`, the spacer passes `u_reg_nxt`. `ackout_nxt` falls,
   so `ackin_cur` rises and `u_reg_cur` is ready for the next word. The
   receiver lowers `ackout_rx`.

The **completion detector on the input side** sees every operand wire
through the register. So operands that the early-reset adder no longer
waits for are still acknowledged here. That is what makes the adder's
incomplete indication safe at system level.

**Constraint on the sender.** The sender must return the *whole* operand
bus to spacer at once. In simulation it was found that if part of the bus
resets long before the rest, the stage can deadlock:

1. The early part reaches the adder.
2. The adder resets early and the spacer result goes through `u_reg_nxt`.
3. A fast receiver acknowledges it, so `ackin_cur` rises again.
4. The late operand wires are then caught as data in `u_reg_cur`, and
   `ackout_cur` never falls.

A sender built from the same kind of register has no such problem, because
it resets all wires together. The end-to-end testbench follows this rule.
The cell and cascade testbenches apply partial resets directly to the
adder, where they are harmless.

**Reset and power-up.** There is no reset input. The idle state is:

- every data wire spacer;
- `ackout_rx = 0`;
- all C-elements low.

To reach it from an arbitrary power-up state, the testbenches apply three
steps in order:

1. drive all data rails high, with `ackout_rx = 0`;
2. drive the spacer with `ackout_rx = 1`;
3. lower `ackout_rx`.

## 5. Timing

The RTL has one parameter, `DLY`, for delay. It gives every gate (every
AND, OR, AO cell and C-element) the same delay.

- With `DLY = 0` (the default), every gate is a plain continuous assignment.
  This is a functional, synthesizable model.
- With `DLY > 0`, every gate becomes `assign #(DLY)`. This is a unit-delay
  model that the testbenches use to measure latencies.

The macro `CELL` in `cell.svh` chooses between the two.

In unit delays, for a word whose longest run of propagating bits is `m`
(applied all at once to the bare adder, measured until every output is
valid, and until every output is spacer again):

| quantity | formula |
|----------|---------|
| forward latency | `m + 4` (2 to generate a carry, 1 per propagating cell, 2 for the sum of the cell that ends the run) |
| reverse latency | 3, for every word and every N (one full-adder delay: CG1/CG2, CG3/CG4, C-element) |
| logic cycle | `m + 7` |

For the carry-chain lengths typical of a 32-bit ALU:

| m | forward | reverse | cycle |
|---|---------|---------|-------|
| 4  | 8  | 3 | 11 |
| 8  | 12 | 3 | 15 |
| 16 | 20 | 3 | 23 |
| 24 | 28 | 3 | 31 |
| 28 | 32 | 3 | 35 |

This is the design's headline property. Forward latency is data-dependent
and linear in the carry-run length. Reverse latency is a constant single
full-adder delay. Against that:

- a strongly indicating adder needs `O(n)` for both phases;
- the earlier early-output adders need about two full-adder delays for the
  spacer.

The original work reports a 32-bit forward latency of 2.99 ns and cycle
times from 0.5 ns (m = 4) to 2.7 ns (m = 28) on a 32/28 nm standard-cell
library. Those figures depend on the cell library and wiring. A
unit-delay RTL model cannot reproduce them. Power and area figures
likewise are not modelled.

## 6. Files

| file | contents |
|------|----------|
| `rtl/dr_pkg.sv` | `dr_t`, spacer/one/zero constants, encode and check functions |
| `rtl/cell.svh` | `CELL` macro: one gate, zero-delay or `DLY`-delayed |
| `rtl/c_element.sv` | 2-input Muller C-element (majority gate with feedback) |
| `rtl/eo_full_adder.sv` | the early output full adder |
| `rtl/rt_rca.sv` | N-bit relative-timed ripple carry adder |
| `rtl/dr_register.sv` | W-wire dual-rail C-element register |
| `rtl/completion_detector.sv` | W-wire completion detector, C-element tree |
| `rtl/rt_rca_stage.sv` | top: register, adder, register and two detectors |
| `tb/rca_model_pkg.sv` | reference model: carry-run length, early-carry mask, unit-delay latency |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_carry_chain` |

Parameters:

| module | parameter | default | meaning |
|--------|-----------|---------|---------|
| `rt_rca_stage`, `rt_rca` | `N` | 32 | operand width |
| `dr_register`, `completion_detector` | `W` | 65 | number of dual-rail wires (`2N+1` operands; the result side uses `N+1`) |
| all | `DLY` | 0 | per-gate delay in simulation time units |

## 7. Verification and simulation

Each testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself
through a watchdog if the handshake hangs.

| testbench | what it does |
|-----------|--------------|
| `tb_c_element` | random input sequences against the C-element rule, zero and unit delay, including the one-unit output delay |
| `tb_eo_full_adder` | all eight valid inputs: values, early carry on generate/kill, waiting sum, unit-delay timing, early reset with the carry input still valid |
| `tb_rt_rca` | 32-bit adder, zero and unit delay, plus the 2-bit example (both bits generate, carry-in 1). Checks directed chains and random words: values, which outputs become valid before the carry input arrives, forward latency against the model, reverse latency of 3 after full and partial resets, and the relative-timing monitor |
| `tb_carry_chain` | forward/reverse latency and cycle time for runs of 4, 8, 16, 24 and 28 propagating bits |
| `tb_dr_register` | 4-wire register, zero and unit delay: random rails and ackin, plus the hold-data and hold-spacer cases of the handshake |
| `tb_completion_detector` | all-valid/all-spacer detection at widths 1, 5 and 65 |
| `tb_rt_rca_stage` | the top at its defaults, end to end (see below) |
| `tb_rt_rca_stage_timed` | the 32-bit stage with unit gate delays, end to end: results, the relative-timing monitor on the adder inside the stage, forward latency of the adder behind the open input register (1 + model), and a constant reverse latency of 1 + 3 units |

`tb_rt_rca_stage` details:

- It sends 1200 random words through the top at its default parameters,
  with a randomly slow receiver.
- It checks every result and watches for illegal codes.
- It requires each mechanism to occur at least once: carry generate, kill
  and propagate, a full 32-bit carry run, the input register holding a
  word while the sender already sends the spacer, and back-pressure from
  the receiver.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Irtl \
  rtl/dr_pkg.sv tb/rca_model_pkg.sv rtl/c_element.sv rtl/eo_full_adder.sv \
  rtl/rt_rca.sv rtl/dr_register.sv rtl/completion_detector.sv rtl/rt_rca_stage.sv \
  tb/tb_rt_rca_stage.sv --top-module tb_rt_rca_stage -Wno-fatal
./obj_dir/Vtb_rt_rca_stage
```

To run another testbench, swap the last source file and the top module.
The warnings printed are:

- the C-element loops (section 1);
- variable delays in the testbenches.

## 8. Where this RTL departs from, or adds to, the original design

Taken from the original:

- the full adder, gate by gate;
- the cascade;
- the relative-timing assumption;
- the stage organisation (register, logic, register, detectors, inverted
  acknowledge);
- the 2-input C-element built from a majority cell with feedback;
- decomposing wide C-element functions into 2-input C-elements;
- the 32-bit width.

Choices made here, where the original is silent:

- **Insides of the register and the completion detector.** The original
  only says what they do. This RTL uses the usual C-element register and
  an OR-per-bit, C-element-tree detector.
- **No reset.** The original says nothing about reset. Initialisation is by
  the power-up sequence of section 4.
- **Port names and packing.** Operands are `{cin, b, a}` on the input
  register.
- **Timing model.** Equal unit delays replace the cell library. All latency
  checks are in these units.
- **The whole-bus spacer constraint.** The deadlock in section 4 is not
  discussed in the original. The RTL keeps the original wiring and states
  the constraint instead of adding logic.
- **Sender and receiver.** Only the protocol is described, so they exist
  only as testbench processes.
