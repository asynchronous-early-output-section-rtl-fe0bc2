# Early output section-carry lookahead adder with alias carry logic (dual-rail QDI)

This is a 32-bit asynchronous adder with no clock. Each bit travels on two
wires, and every gate waits for real data before it switches, so the result
is correct for any gate and wire delays. The one exception is the usual
isochronic-fork assumption of quasi-delay-insensitive (QDI) logic.

The adder is a *section-carry based carry lookahead adder* (SCBCLA):

- It is cut into eight 4-bit sections.
- Inside a section the carry ripples from bit to bit to form the sums.
- At the same time a lookahead generator computes the one carry that leaves
  the section and hands it to the next section.

The feature that gives the design its name is the *alias carry*. Each section
carry generator produces the same carry twice:

- once through a C-element and an OR gate, which acknowledges every internal
  transition safely;
- once through a single AND-OR gate (AO21), which is faster.

The fast copy carries the lookahead from section to section. The safe copy
feeds the next section's ripple chain. As a result, a carry crosses a
section in one gate delay, without giving up delay insensitivity.

The RTL here describes the adder down to individual gates and C-elements. It
also describes the pipeline stage around it: input and output registers,
completion detectors and the 4-phase handshake. It simulates with Verilator
and synthesizes with Yosys. The C-elements appear as latches.

## Dual-rail data and the 4-phase protocol

A logical bit `X` is a pair of wires `{X1, X0}`. In the code this pair is the
struct `qdi_pkg::dr_t` with fields `r1` and `r0`.

| `r1 r0` | meaning |
|---|---|
| `1 0` | data 1 |
| `0 1` | data 0 |
| `0 0` | spacer (no data) |
| `1 1` | illegal |

Data and spacer alternate on every wire. The sequence is: data, all wires
back to spacer, next data, and so on. This is the return-to-zero, 4-phase
protocol. A receiver knows it has a complete word when every pair holds data.
It knows the word is gone when every pair is spacer. No clock is needed.

Two properties follow, and the testbenches check both:

- **Monotonic outputs.** While data arrives, wires only rise. While the
  spacer arrives, wires only fall.
- **No illegal code.** No pair ever shows `11`.

### Early output

The adder is of the *early output* type.

- **Early set.** An output may become data before all inputs have arrived.
  For example, if the top bit pair of a section is `1+1`, that section's
  carry out is known at once.
- **Early reset.** An output may return to spacer before all inputs have
  returned to spacer.

Strongly indicating circuits wait for every input. Weakly indicating circuits
hold back at least one output until every input has arrived. An early output
circuit does neither. This lets it use plain AND-OR gates in many places
where other styles need C-elements, which is why it is smaller and faster.
The price is that a stage built from it must find out in another way that
its inputs are complete. In this design the completion detector on the input
register does that job (see *The stage*).

## The C-element

`c_element` is the only state-holding gate in the adder:

- both inputs 1: output 1;
- both inputs 0: output 0;
- inputs differ: output keeps its value.

The next-state function is `y+ = ab + y(a+b)`. It is written as a
level-sensitive latch with enable `a == b` and data `a`. The original is a
custom 12-transistor cell.

## The 4-bit section carry generator (`scbclg4`)

This is the heart of the design and the hardest part to read.

A conventional carry lookahead generator gives a carry for every bit. This
one gives only the carry out of its section, `C4`. It splits the eight
operand inputs of the section into three mutually exclusive cases, each
known before the carry in arrives:

| case | meaning | section carry |
|---|---|---|
| `gen` | the section generates a carry | 1 |
| `kill` | the section kills the carry | 0 |
| `N` | all four bit pairs propagate (`a_i != b_i`) | equals carry in |

### How the three cases are formed

Bits 3 and 2 are decoded directly, with AND-OR gates.

`gen32` covers:

- bit 3 generates: `A3=B3=1`;
- bit 3 propagates and bit 2 generates.

`kill32` is the mirror image of `gen32`.

`p32` means bits 3 and 2 both propagate. It is an OR of four 4-input ANDs:

```
p32 = A30 B31 A20 B21 + A30 B31 A21 B20 + A31 B30 A20 B21 + A31 B30 A21 B20
```

Bits 1 and 0 are resolved by a tree of 2-input C-elements that starts at
`p32`:

```
p32 -C- A11 -C- B11  -> gen  (bit 1 generates)
            -C- B10  -> bit 1 propagates -> { -C- A01 / A00 } -> { -C- B01 / B00 }
    -C- A10 -C- B11  -> bit 1 propagates -> (same two levels for bit 0)
            -C- B10  -> kill (bit 1 kills)
```

The four leaves at bit 0 sort each propagating path three ways:

- bit 0 generates: the leaf goes to `gen`;
- bit 0 kills: the leaf goes to `kill`;
- bit 0 propagates: the leaf goes to node `N`.

`N` is the OR of the four "all propagate" leaves.

Because this tree is built from C-elements rather than AND gates, each leaf
both rises and falls only after all of its inputs have. This acknowledges
the operand transitions through the tree.

### The two carry outputs

```
C41      = C(C01, N) + gen          C40      = C(C00, N) + kill
C41alias =   C01 . N + gen          C40alias =   C00 . N + kill     (AO21)
```

The two pairs are logically equal.

**The C-element form `(C41, C40)`.** Its C-element waits for `N` to fall
before the carry can fall. Suppose the carry in goes to spacer first: the
carry out still holds until `N` is spacer. So this output *acknowledges*
node `N`.

**The alias form.** It drops as soon as the carry in drops. If it were the
only output, a late fall of `N` would go unacknowledged. That is a gate
orphan, and it breaks delay insensitivity.

**Why both are kept.** Node `N` is treated as an isochronic fork, so the
acknowledgement by the C-element form counts for both branches. That allows
the alias form to be used where speed matters:

- The path from carry in to carry out is one AO21 gate in the alias form.
- In the C-element form it is a C-element plus an OR gate.
- The alias form also returns to spacer early.

When `ALIAS=0` the alias gates are not built, and `cout_alias` carries the
same wires as `cout`.

## Full adder and sum-only logic (`eo_fa`, `eo_sol`)

Both cells first classify the operand pair:

```
eq = A0.B0 + A1.B1     (bits equal: sum = carry in)
df = A0.B1 + A1.B0     (bits differ: sum = inverted carry in)
```

Four C-elements then combine `eq` and `df` with the carry-in rails:

```
SUM1 = C(eq, CIN1) + C(df, CIN0)     SUM0 = C(eq, CIN0) + C(df, CIN1)
```

The full adder's carry out is one AO22 gate per rail:

```
COUT1 = CIN1.df + A1.B1              COUT0 = CIN0.df + A0.B0
```

This gives both early behaviours:

- The carry out is data as soon as the operands generate or kill (early set).
- The carry out falls as soon as the operands fall (early reset).

The sum C-elements hold the sum until the carry in and one operand have both
fallen.

The sum-only logic (SOL) is the same cell without the carry out. It sits in
bit 3 of every section, whose carry out comes from the section's carry
generator instead.

## Sections and the 32-bit adder (`sub_scbcla`, `scbcla`)

A section (`sub_scbcla`) contains:

- a `scbclg4`;
- full adders at bits 0, 1 and 2;
- a SOL at bit 3;
- two carry inputs:
  - `cin_lcg` feeds the carry generator;
  - `cin_rca` feeds the ripple chain.

With alias logic (the default), the 32-bit adder `scbcla` is wired as
follows:

```
           section 7          ...        section 1              section 0
cout  <-- C32 (C-elem)                    C8 ------------.      C4 --------.
                                                          \                 \
alias <-- C32alias       <- C8alias <---- [SCBCLG] <------ C4alias <- [SCBCLG] <- cin
                                          [FA FA FA SOL] <-- C4       [FA FA FA SOL] <- cin
```

- Section `j` takes the **alias** carry of section `j-1` into its SCBCLG.
  This is the fast inter-section path: one AO21 gate per section.
- Section `j` takes the **C-element** carry of section `j-1` into its full
  adder chain.
- Section 0 takes the primary carry in on both inputs.
- The adder's carry out is the C-element carry of section 7.
- The top alias carry is also brought out, as `cout_alias`.

### Parameters of `scbcla`

- `ALIAS=0` gives the adder without alias logic. Every section then uses one
  carry for both inputs, and the inter-section path is a C-element and an OR
  gate per section.
- `HYBRID=1` replaces section 0 with `eo_rca`, a 4-bit ripple chain of early
  output full adders. Its carry out feeds both inputs of section 1. The
  ripple chain costs less area than a section, and its carry path (AO22
  gates) is shorter than the carry generator's AND/OR/C-element path. The
  original evaluation found the hybrid with alias logic the fastest of all
  the variants.
- The section width is fixed at 4. `N` must be a multiple of 4.

## The stage (`scbcla_stage`, the top)

```
            +-----------+          +--------+          +-----------+
 a,b,cin -->| input reg |--------->| scbcla |--------->| output reg|--> sum, cout
            +-----------+    |     +--------+          +-----------+   |
               ^ ACKIN       v                               ^ ACKIN   v
               |       [completion det]--> ack_to_sender     |   [completion det]
               |              |                              |         |
               +----C---------+                     ack_from_receiver  |
                    ^-------------------------------------------------+
```

The stage has the following parts.

**Registers (`dr_register`).** Each rail is a C-element of the incoming rail
and `ackin`:

- `ackin=1` (request for data): rails can only rise, so data is taken bit by
  bit and then held;
- `ackin=0` (request for spacer): rails can only fall.

`rst` clears every rail to spacer.

**Completion detectors (`completion_detector`).** Each one is an OR per bit
followed by a many-input C-element.

- `ackout` goes to 0 once the whole bundle is data.
- `ackout` goes back to 1 once the whole bundle is spacer.

A deferred assertion flags any bit that shows `11`.

**Handshake with the sender.** `ack_to_sender` is the input detector's
output. The sender:

1. waits for `ack_to_sender=1`;
2. applies data;
3. waits for `ack_to_sender=0`;
4. applies the spacer.

**Handshake with the receiver.** The receiver drives `ack_from_receiver`:

1. it lowers the signal once it has read the result;
2. it raises the signal once the outputs are spacer.

**The input register's ACKIN.** This signal is a C-element of two signals:

- the output detector's `ackout` (the next stage's request);
- the input detector's own `ackout`.

The C-element is needed because the adder is early output. Its outputs can
all be spacer while some of its inputs are still data. The output register
would then ask for new data while some input register bits had not yet
cleared. Those bits would be stuck at data, and the stage would deadlock.
With the C-element, the input register changes phase only when the next
stage asks for it *and* its own bits have all completed the present phase.

One addition takes one full 4-phase cycle.

## Files

| file | content |
|---|---|
| `rtl/qdi_pkg.sv` | `dr_t` dual-rail type; encode / classify functions |
| `rtl/c_element.sv` | 2-input C-element |
| `rtl/eo_fa.sv`, `rtl/eo_sol.sv` | early output full adder, sum-only logic |
| `rtl/scbclg4.sv` | 4-bit section carry generator, optional alias carry |
| `rtl/sub_scbcla.sv` | one 4-bit section |
| `rtl/eo_rca.sv` | early output ripple carry adder (hybrid's low nibble) |
| `rtl/scbcla.sv` | N-bit adder, parameters `N`, `ALIAS`, `HYBRID` |
| `rtl/dr_register.sv` | dual-rail stage register |
| `rtl/completion_detector.sv` | completion detector with ACKOUT |
| `rtl/scbcla_stage.sv` | top: registers, detectors, adder, handshake |
| `tb/tb_*.sv` | one self-checking testbench per module |

Defaults of the top are `N=32`, `ALIAS=1` and `HYBRID=0`.

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and ends. Each
has a watchdog. To build and run one with Verilator 5, for example the
end-to-end test:

```
verilator --binary --timing --assert --top-module tb_scbcla_stage \
  -y rtl -y tb +libext+.sv -Irtl rtl/qdi_pkg.sv tb/tb_scbcla_stage.sv -o sim
./obj_dir/sim
```

Replace `tb_scbcla_stage` with any other testbench name. Expect warnings
about circular logic in the stage (see *Linter messages*). They are not
errors.

### What each testbench checks

| testbench | what it checks |
|---|---|
| `tb_c_element` | random input walk against the C-element rule |
| `tb_eo_fa`, `tb_eo_sol` | all 8 values, with inputs arriving in all 6 orders and leaving in a random order. After every step, compares with the early output rule: when sum and carry must be data, spacer or held. Counts early set and early reset |
| `tb_scbclg4` | all 512 values of `(a, b, cin)`. Early set with the carry in still spacer. Both spacer orders: alias drops early while the C-element carry holds, or the C-element carry waits for the carry in |
| `tb_sub_scbcla`, `tb_eo_rca` | exhaustive 4-bit addition; the section carry is ready before the ripple input arrives |
| `tb_scbcla` | four builds side by side (with or without alias, regular or hybrid). 1000 random additions plus directed full-propagate ones. The 65 inputs arrive and leave one at a time in random order. After each step: monotonic outputs and no `11`. At the end: the exact sum, then full spacer |
| `tb_scbcla_stage` | full default size, sender and receiver processes, 1004 additions at least 20 ns apart, sometimes a slow receiver. Counts transfers, sender stalls, early set, early reset, alias early reset and output-register holds; each must occur |
| `tb_dr_register`, `tb_completion_detector` | hold and release in both phases; reset |

## Where this RTL departs from the original design, and its limits

**Function only, no timing.** The adder is described at gate level, but
simulation has zero delay. The evaluation measured latency (about 2.3 ns for
the 32-bit adder with alias logic), area and power in a 32/28 nm process.
None of these can be reproduced here.

- The speed advantage of the alias carry shows only as structure: fewer gates
  on the inter-section path.
- The tests do observe alias behaviour: the alias carry returns to spacer
  ahead of the C-element carry.

**C-elements.** They are latches, not custom cells.

**OR grouping in the carry generator.** The generate and kill terms are
grouped into OR gates as follows: one 3-term group from bits 3 and 2, then
one gate with the three C-element leaves. The original drawing is not fully
legible here. The function is unchanged: `C41 = C(C01,N) + gen` with a
2-input final OR.

**The alias gate.** It is `C01.N + gen`, a true AO21. One description of this
gate gives the four-input form `AB + CD`, which would be AO22. The drawn gate
and its name were followed.

**The stage around the adder.** The original only names these parts: the
registers, the completion detectors and their ACK wiring. The following are
choices made here:

- the C-element register;
- the ACK polarity (1 = request for data);
- the reset;
- the C-element on the input register's ACKIN.

The last of these is an addition. Without it the stage deadlocks in
simulation when input bits arrive at very different times (see *The
stage*).

**Variants not built.** The weak-indication variants and the recursive CLA
appear only as points of comparison. They are not built.

### Linter messages

- **Circular logic.** Verilator reports circular combinational logic through
  the stage's completion detectors. That loop is the asynchronous handshake
  itself, and every path around it passes through a C-element.
- **Latches.** Synthesis lists latches. They are all C-element state:
  - one per C-element in the adder;
  - two per bit in each register;
  - one per completion detector.
