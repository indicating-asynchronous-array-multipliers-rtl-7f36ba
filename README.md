# An indicating asynchronous array multiplier in SystemVerilog

This is a multiplier that needs no clock. It tells the next stage when a
product is ready from the way the product is encoded, not from a timing
assumption. Every bit travels on two wires ("dual-rail"). Between two words
the wires go back to a neutral state, the *spacer*. A receiver knows a
product is complete when every product bit has left the spacer. A product
bit can only become complete after every operand bit it depends on has
arrived, so the circuit keeps working whatever the gate and wire delays are.
Circuits of this kind are called *indicating*: their outputs indicate that
the inputs have arrived.

The datapath is the classic shift-and-add array multiplier: N×N partial
products and N(N−1) full adders. It is built entirely from two-input
Muller C-elements and OR/AND gates. The RTL follows the architecture of
Balasubramanian and Maskell, "Indicating Asynchronous Array Multipliers".
That paper compares many variants of this array. The variant built here is
the one the paper found best:

- weakly indicating full adders;
- strongly indicating AND gates for the partial products;
- return-to-one (RTO) handshaking by default, with return-to-zero (RTZ)
  selectable by a parameter;
- 8×8 operands by default, with 4×4 (also evaluated in the paper) selectable
  by a parameter.

One part of that variant is not reproduced: the published full adder the
paper uses, whose gates the paper does not give. In its place is a full
adder designed here with the same function and the same indication class
(see "The full adder").

## Dual-rail codes and the two four-phase protocols

A bit X is carried as the pair (X1, X0). In the RTL the pair is the packed
struct `dr_pkg::dr_t {r1, r0}`. Rail `r1` is the one that switches for the
value 1, and `r0` the one that switches for the value 0.

| protocol | spacer | value 1 | value 0 | illegal |
|---|---|---|---|---|
| RTZ (return to zero) | (0,0) | (1,0) | (0,1) | (1,1) |
| RTO (return to one)  | (1,1) | (0,1) | (1,0) | (0,0) |

In RTO every level is the inverse of RTZ. An RTO circuit is obtained from
an RTZ circuit as follows:

- C-elements stay as they are;
- every OR gate becomes an AND gate;
- reset levels and constants are inverted.

Each module therefore has a single netlist with a `PROTOCOL` parameter. The
functions `merge2/3/4` in `dr_pkg` give the OR gate for RTZ and the AND gate
for RTO.

A transfer is a four-phase handshake between a sender and a receiver. In
RTZ it goes like this:

1. The sender puts data on the bus.
2. The receiver raises its acknowledge once the data is complete.
3. The sender returns the bus to the spacer.
4. The receiver lowers its acknowledge once the spacer is complete.

In RTO the sequence is the same, with the spacer (all ones) and the
acknowledge levels inverted. After reset, an RTO stage sits in the
spacer-acknowledged state and waits for data. Each stage has two
acknowledge wires:

- `Ackout` is the acknowledge a stage sends back to the stage before it;
- `Ackin` is a stage's copy of the next stage's `Ackout`, inverted.

## The stage (`async_array_multiplier`, the top)

```
 sender ──a,b──► dr_register ──► array_multiplier_core ──p──► receiver
                 (C per rail)          (ANDs + adders)
                    ▲   │
            ackin = ~ack_rcv            completion_detector ──► ackout
```

- **Register bank (`dr_register`).** Each operand rail goes through a
  C-element whose other input is `Ackin`. While `Ackin` = 1 a rail can only
  rise; while `Ackin` = 0 it can only fall.
  - In RTZ, data enters once the receiver has acknowledged the previous
    spacer. The spacer enters once the receiver has acknowledged the data.
  - In RTO this happens the other way round, and the same structure
    implements it.
  - If the sender is already showing the spacer while the receiver is still
    busy, the register keeps the old data, so the product stays valid. This
    is what makes a pipeline of such stages elastic.
- **Completion detector (`completion_detector`).** Each operand pair is
  reduced to "this pair has data": an OR of its rails in RTZ, an AND in RTO.
  A balanced tree of two-input C-elements (`c_tree`) then combines the
  pairs. `ackout` changes only when all 2N operand bits hold data, or all
  hold the spacer. It keeps its old value in between. The sender sees the
  inverse of `ackout` as its own `Ackin`.
- **Core (`array_multiplier_core`).** Described in the next section. It has
  no state apart from its C-elements, and it needs no acknowledge of its
  own: its outputs indicate its inputs.

Ports of the top: `a`, `b` (N × `dr_t`), `p` (2N × `dr_t`), `ackout`,
`ack_rcv` (the receiver's Ackout) and `rst`. `rst` puts every C-element at
the spacer level. Release it with the operands at the spacer and `ack_rcv`
at its idle level (RTZ 0, RTO 1).

## Strong and weak indication, and why the product indicates every operand

- A **strongly indicating** block changes no output until all of its inputs
  have changed. This applies to both the data and the spacer phase.
- A **weakly indicating** block may produce all but one of its outputs from
  a subset of its inputs. Its last output waits for the last input.

A chain of strongly indicating cells is only weakly indicating as a whole.

**`si_and2`**, one per partial product, is strongly indicating. It has four
C-elements, one per input combination:

- C1 = (A1, B1) drives Z1.
- C2 = (A0, B0), C3 = (A0, B1) and C4 = (A1, B0) are merged onto Z0 by an
  OR gate (AND gate for RTO).

Exactly one C-element fires for each data word. Because it is a C-element,
it fires only after both operands have arrived, and releases only after
both have returned to the spacer.

**`wi_full_adder`** is weakly indicating (see the next section). Its carry
can be produced early, but its sum waits for all three inputs.

These properties give the whole array its indication:

1. Every partial product except A0B0 enters some adder.
2. Every adder's sum goes either to a product bit or into an adder below it,
   which in turn waits for that sum.
3. By induction, the complete set of product bits cannot be data until every
   partial product, and so every operand bit, has arrived. The same holds
   for the return to the spacer.
4. Some product bits can appear earlier. P0 = A0B0 needs only two operand
   bits, for example.

This is the behaviour the testbenches check. The product must never be
complete before the last operand bit arrives, and early product bits must
actually occur.

All product terms on a rail are disjoint, so exactly one path switches per
data word. The paper calls this the monotonic cover constraint. Every rail
therefore switches at most once per phase, and only in one direction.

## The full adder (`wi_full_adder`)

The best array in the paper uses a published "biased" weakly indicating
full adder whose gate netlist the paper does not reproduce. The adder here
is this design's own, written from the same rules: two-input C-elements,
disjoint product terms, weak indication. It has four decoding C-elements
and eight minterm C-elements, twelve in all:

```
ab00 = C(a0,b0)  ab01 = C(a0,b1)  ab10 = C(a1,b0)  ab11 = C(a1,b1)
mXYc = C(abXY, ci_c)              (eight minterms)

co1 = ab11 + m101 + m011          co0 = ab00 + m010 + m100
s1  = m100 + m010 + m001 + m111   s0  = m000 + m110 + m101 + m011
```

Here `+` is OR in RTZ and AND in RTO. When a = b, the carry follows from a
and b alone (ab11 or ab00), so it is produced, and released, without
waiting for the carry input. That early carry is what shortens the carry
ripple. The sum always waits for a, b and ci, so the sum indicates all
three inputs.

Some adders have a constant 0 as carry input: the N−1 adders of the first
row and the first adder of the last row. These adders are built with
`CIN_RESET = 1`. A C-element that has one input tied to a constant could
never return to the spacer, so the C-elements that would wait on the carry
are removed. The cell then computes a + b:

- co = ab11 (on co1), or ab00 + ab01 + ab10 (on co0);
- s = ab10 + ab01 (on s1), or ab00 + ab11 (on s0).

The paper only says that these carry inputs are "set" to 0 in RTZ and to 1
in RTO. The half-adder form is this design's reading of that.

## The array (`array_multiplier_core`)

The adders are numbered by row k = 1..N and by bit weight w. `pp[i][j]`
stands for A[i]B[j].

| row | weights | inputs of the adder at weight w |
|---|---|---|
| 1 | 1 … N−1 | pp[w][0], pp[w−1][1], carry input constant 0 |
| 2 … N−1 | k … k+N−2 | pp[w−k][k]; the sum of row k−1 at weight w (pp[N−1][k−1] at the row's top weight); the carry of row k−1 from weight w−1 |
| N | N … 2N−2 | the sum of row N−1 at weight w (pp[N−1][N−1] at the top weight); the carry of row N−1 from weight w−1; the ripple carry from weight w−1 (constant 0 at w = N) |

The product bits come from these places:

- P0 = pp[0][0];
- P[k] = the sum of row k at weight k, for k < N;
- P[w] = the sum of row N at weight w, for N ≤ w ≤ 2N−2;
- P[2N−1] = the carry out of row N.

Rows 1 to N−1 form a carry-save array, and row N is a ripple-carry adder.
There are N(N−1) adders, N of them with a constant carry input, and N² AND
cells. At N = 8 the design holds 911 C-elements, each synthesising to a
latch: 32 in the register, 15 in the completion detector, 256 in the ANDs
and 608 in the adders.

## How the asynchronous logic is modelled

- `c_element` is written as a level-sensitive latch that is transparent
  while its inputs agree:
  `always_latch if (rst) z = INIT; else if (a == b) z = a;`.
  It behaves exactly like the AO222 gate with feedback, z = ab + az + bz,
  that was used as the physical C-element. It avoids a combinational loop
  in simulation and in synthesis. The latches reported by synthesis are
  these C-elements, and they are intended.
- There is no clock anywhere in `rtl/`. Simulation is zero-delay, and the
  testbenches move time forward with `#` delays.
- The reset input `rst` is this design's addition. It exists because a
  two-state simulator starts latches at arbitrary values, and because real
  C-element chains need a defined start state as well.
- What zero-delay RTL cannot show:
  - cycle time, forward and reverse latency;
  - area and power;
  - whether the isochronic-fork assumption holds;
  - gate orphans (transitions on internal wires that no output
    acknowledges), which depend on how the gates are mapped to cells.

  The paper measured cycle time, area and power on a 32/28 nm standard-cell
  layout. Those figures cannot be reproduced from this code.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| all datapath modules | `PROTOCOL` | `RTO` | `dr_pkg::RTZ` or `dr_pkg::RTO` |
| `async_array_multiplier`, `array_multiplier_core` | `N` | 8 | operand width; the paper evaluates 4 and 8 |
| `dr_register`, `completion_detector` | `WIDTH` | 16 | number of dual-rail pairs (2N in the top) |
| `wi_full_adder` | `CIN_RESET` | 0 | 1 = carry input is the constant 0 |
| `c_element`, `c_tree` | `INIT` | 0 | reset level (spacer level: 0 RTZ, 1 RTO) |

`N` must be at least 2.

## Files

| `rtl/` file | what it is |
|---|---|
| `dr_pkg.sv` | dual-rail type, protocol enum, encode/decode and OR/AND helpers |
| `c_element.sv`, `c_tree.sv` | two-input C-element and a balanced tree of them |
| `dr_register.sv` | C-element register bank gated by Ackin |
| `completion_detector.sv` | OR/AND per pair plus C-tree, gives Ackout |
| `si_and2.sv` | strongly indicating AND (partial products) |
| `wi_full_adder.sv` | weakly indicating full adder, with half-adder variant |
| `array_multiplier_core.sv` | N×N array |
| `async_array_multiplier.sv` | the stage: register + completion detector + core (top) |

Each block has a testbench in `tb/` named `tb_<module>.sv`, and every
testbench prints `TB_RESULT checks=… failures=…`. Beyond the per-block
tests:

- **`tb_async_array_multiplier`** runs the stage for 4×4 and 8×8 under both
  protocols, with a randomised sender and receiver (`mult_env.sv`).
  - Operand bits arrive and leave one at a time.
  - The receiver answers after random delays.
  - The test counts handshakes, early product bits and register stalls, and
    fails if any of them never happened.
- **`tb_multiplier_workloads`** runs all 256 (4×4) and all 65,536 (8×8)
  operand pairs through the stage under both protocols.
- **`tb_async_array_multiplier_full`** takes the top at its default
  parameters through every 8×8 product.
- **`core_env.sv`** drives the core on its own, for
  `tb_array_multiplier_core`.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb rtl/dr_pkg.sv \
    tb/tb_multiplier_workloads.sv --top-module tb_multiplier_workloads -o sim
./obj_dir/sim
```

Replace the testbench name to run another test. All tests finish in
seconds; the exhaustive workload test takes about 10 s. To lint the design:

```
verilator --lint-only -Wall -Irtl rtl/dr_pkg.sv rtl/async_array_multiplier.sv
```

Lint reports three unused-signal warnings:

- the ignored carry input of the constant-carry adders;
- the spare sum signal of the array's empty grid positions;
- the spare carry signal of those same positions.

## Where this departs from the paper, and how far to trust it

Taken from the paper:

- the dual-rail codes and both handshakes;
- the register bank of one C-element per rail gated by Ackin;
- the OR/AND completion detector with a C-element tree;
- the four-C-element strongly indicating AND;
- the array wiring, including which partial products enter which adder and
  which N adders have a constant carry input;
- the partial-product, adder and product-bit counts.

This design's own choices:

- The full adder netlist. The paper's preferred adder is a published cell
  whose gates are not given.
- How C3 and C4 of the AND cell pair their inputs. This was derived from
  the logic function.
- The half-adder reading of the constant carry input.
- The reset input.
- The balanced C-tree.
- RTO and 8×8 as defaults. The paper prefers RTO, and 8×8 is its larger
  size.

Verified: in zero-delay simulation, every product of the 4×4 and 8×8 arrays
under both protocols is correct, and so is the handshake sequence. For
every operand arrival order tried, the product never completes before the
last operand bit. Each testbench fails when its block is replaced by a
deliberately broken copy.

Not verified: anything that depends on delays. That covers hazards,
isochronic forks, gate orphans after technology mapping, and the cycle
times, areas and power figures reported for the physical implementations.
