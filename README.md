# Early output dual-rail ripple carry adder built from single-bit and dual-bit full adders

A ripple carry adder is slow because the carry has to pass through every bit
position. This design is a 32-bit **asynchronous**, delay-insensitive adder
that cuts the number of carry stages from 32 to 17. It does this in two ways:

* Most of the adder is built from **dual-bit full adders (DAFAs)**. Each one
  adds two bit positions at once, so the carry takes one step per two bits.
* Every full adder is an **early output** gate network. Its carry output
  becomes valid as soon as the operands decide it, without waiting for the
  carry input. The carry path through one stage is then a single complex gate:
  an AO21 in a DAFA, an AO22 in a single-bit adder.

A DAFA in the least significant position would need an AND4, an OR and an AO21
before its first carry was ready. So the two lowest positions use
**single-bit full adders (SAFAs)** instead, and fifteen DAFAs cover bits 2 to
31:

```
 carry out                                                   carry in
 <- DAFA[31:30] <- DAFA[29:28] <- ... <- DAFA[3:2] <- SAFA[1] <- SAFA[0] <-
```

The adder works inside a standard 4-phase, return-to-zero pipeline stage. An
input register feeds the adder and an output register takes its result. A
completion detector on each register produces the acknowledges. Nothing here
has a clock.

## Dual-rail data and the 4-phase handshake

Every bit travels on two wires, `r1` and `r0` (type `dr_pkg::dr_t`):

| (r1, r0) | meaning |
|---|---|
| (1, 0) | data 1 |
| (0, 1) | data 0 |
| (0, 0) | spacer: no data |
| (1, 1) | illegal |

A transfer has four phases:

1. The sender raises one rail of each bit. The bits may arrive in any order and
   at any time.
2. The receiver sees every bit valid and raises its acknowledge.
3. The sender returns all bits to spacer.
4. The receiver sees all spacer and lowers its acknowledge.

Nothing depends on wire or gate delays. The only timing assumption is that a
forking wire delivers its transition to all branches together (an isochronic
fork).

## The single-bit adder (`safa`)

The SAFA has four AO22 gates, four C-elements and two OR2 gates. A C-element
is a gate whose output copies its inputs when they agree and holds its value
when they differ.

```
CG1 = A0.B0 + A1.B1           a equals b
CG2 = A0.B1 + A1.B0           a differs from b
SUM1 = C(CG1, CIN1) + C(CG2, CIN0)
SUM0 = C(CG1, CIN0) + C(CG2, CIN1)
COUT1 = A1.B1 + CG2.CIN1      (CG3)
COUT0 = A0.B0 + CG2.CIN0      (CG4)
```

The product A1.B1 appears both in CG1 and in CG3, and A0.B0 both in CG1 and in
CG4. This duplication is the "implicit redundancy" that makes the adder early
output:

* When a = b, the carry is decided by the operands alone. The carry output
  goes valid without waiting for `cin` (early set).
* When a and b return to spacer, the carry output returns to spacer at once,
  even if `cin` is still valid (early reset).
* The sum rails are C-element outputs. They wait for `cin` in both directions:
  they need it to go valid, and they hold until it returns to spacer.

Every sum-of-products term is disjoint, so exactly one path switches for any
input. The delay-insensitive design style needs this property.

## The dual-bit adder (`dafa`)

Write, for the upper pair (index 1) and the lower pair (index 0) of bit
positions:

* kill k = A0.B0
* generate g = A1.B1
* propagate p = A0.B1 + A1.B0

Here `A11,A10` are the rails of the upper augend bit, `A01,A00` those of the
lower bit, and likewise for B. The DAFA is a network of AND4/AND2 gates, OR
gates, AO21 gates and eight C-elements that computes:

```
X  = p1.p0                      OR4 of four AND4 products
Y  = (g1 + k1).p0               OR4 of four AND4 products
G  = A11.B11 + p1.g0            AO21
K  = A10.B10 + p1.k0            AO21
COUT1 = X.CIN1 + G              AO21
COUT0 = X.CIN0 + K              AO21
SUM11 = C(X,CIN0) + C(Y,CIN1) + (p1.k0 + k1.g0 + g1.g0)     OR3
SUM10 = C(X,CIN1) + C(Y,CIN0) + (p1.g0 + g1.k0 + k1.k0)     OR3
SUM01 = C(p0,CIN0) + C(k0+g0,CIN1)
SUM00 = C(p0,CIN1) + C(k0+g0,CIN0)
```

The path from `cin` to `cout` is one AO21, which is why a chain of DAFAs is
fast. This is the **redundant-logic** form of the DAFA. The alternative form
computes the carry as `C(X,CIN) OR G/K`. It puts a C-element and an OR2 on the
carry path and is slower, so it is not used here.

Which outputs a DAFA can produce before its carry input arrives:

| output | valid without `cin` when | returns to spacer with `cin` still valid |
|---|---|---|
| `cout` | the two pairs do not both propagate | always, once the operands are spacer |
| `sum[1]` | the lower pair does not propagate (its value then comes from the third OR input) | only if it was set that way; otherwise its C-element holds it until `cin` resets |
| `sum[0]` | never | never: it holds until `cin` resets |

The adder testbenches check these rules exactly.

## The adder (`eo_rca`)

`eo_rca` chains `NUM_SAFA` SAFAs and `(WIDTH-NUM_SAFA)/2` DAFAs through their
dual-rail carries. The defaults are `WIDTH = 32` and `NUM_SAFA = 2`, which give
15 DAFAs. `WIDTH - NUM_SAFA` must be even.

When all operands are present but `cin` is not, a position's sum is already
valid if the carry into it is decided. A carry is decided if some stage at or
below it generates or kills. When the operands return to spacer while `cin` is
still present, every output becomes spacer except bit 0's sum.

In gate delays, the worst-case forward latency of the stage is:

```
T = T_BUF + T_REG + 3 T_AO22 + 14 T_AO21 + T_CE2 + T_OR3
```

The terms are:

* an input buffer and the register's C-element;
* three AO22 gates: CG2 of the lowest SAFA, then the carry gate of each SAFA;
* fourteen AO21 carry steps through DAFAs 1 to 14;
* the C-element and OR3 that form the sum of the last DAFA. For the default configuration built in a
32/28 nm standard-cell process, the reported figures are 2.14 ns latency,
2436 µm² area and 2173 µW average power. These figures come from the
publication. This RTL has no delays and does not reproduce them.

The choice of SAFAs only at the bottom is a latency decision. Moving more
positions to SAFAs (for example 4 SAFAs and 14 DAFAs) saves area but adds
latency. `NUM_SAFA` lets you build such variants, but only the default is
verified.

## The pipeline stage (`async_rca_stage`, the top)

```
 a,b,cin ─► dr_register (65 bits) ─► eo_rca ─► dr_register (33 bits) ─► sum,cout
                 │    ▲                               │     ▲
      completion_detector                 completion_detector   rx_ackout (inverted)
                 │    └────────── inverted ───────────┘
              ackout
```

* **`dr_register`** has one C-element per rail. The C-element's second input
  is the register's `ack_in`. A rail rises only when its input is high and
  `ack_in = 1`, and falls only when its input is low and `ack_in = 0`. So the
  register takes a new word only after the previous one has been acknowledged
  and cleared. Its delay is one C-element.
* **`completion_detector`** ORs the two rails of each bit and joins the ORs in
  a balanced tree of 2-input C-elements. Its output rises when every bit holds
  data and falls when every bit is spacer.
* The input-side detector drives `ackout` to the sender. The adder produces
  some outputs before all inputs have arrived, so only this detector proves
  that the whole input word was seen. It is what makes an early output adder
  safe to use.
* The output-side detector drives the input register's `ack_in` through an
  inverter. The input register therefore opens for a new word only after the
  previous result has left the output register. The output register's
  `ack_in` is the inverse of the receiver's `rx_ackout`.
* A slow receiver stalls the stage, and through the stage's `ackout` it stalls
  the sender. At most one word is in the stage at a time.
* `rst_n` (active low) clears both registers to spacer. Hold it while the
  inputs are spacer. The adder and the detector trees clear by themselves once
  their inputs are spacer.

### Port summary of `async_rca_stage`

| port | dir | width | meaning |
|---|---|---|---|
| `rst_n` | in | 1 | clear both registers |
| `a`, `b` | in | `WIDTH` × `dr_t` | operands |
| `cin` | in | `dr_t` | carry input |
| `ackout` | out | 1 | acknowledge to the sender |
| `sum` | out | `WIDTH` × `dr_t` | sum |
| `cout` | out | `dr_t` | carry output |
| `rx_ackout` | in | 1 | acknowledge from the receiver |

## The C-element in RTL

The C-element (`c_element`, and `c_element_rst` with a clear) is written as a
level-sensitive latch that loads `a` whenever `a == b`. Synthesis therefore
maps every C-element to a latch plus an XNOR enable. That is functionally
right but is not the custom cell a real implementation would use.

For a silicon implementation, replace these two modules with the library's
C-element cell. Also constrain the isochronic forks and the acknowledge loops
in the physical design flow.

Lint tools report the acknowledge paths of the stage as combinational loops.
These loops are the handshake itself and are intended.

## Simulating

Each module has a self-checking testbench in `tb/<module>_tb.sv`. Each one
prints `TB_RESULT checks=N failures=M`. They use `#` delays only to order
events. The design itself has no delays.

```
verilator --binary --timing --assert -Wno-fatal -y rtl \
    rtl/dr_pkg.sv tb/async_rca_stage_tb.sv --top-module async_rca_stage_tb
obj_dir/Vasync_rca_stage_tb
```

`-Wno-fatal` is needed because Verilator reports the intended loops and
latches as warnings. Replace the testbench name to run another testbench. All
of them finish in well under a second.

What the testbenches check:

* **`c_element_tb`** compares the gate against a reference state over random
  input sequences.
* **`safa_tb`** and **`dafa_tb`** try all input combinations in random
  arrival orders. After every single input change they check two things:
  * no output is illegal or wrong;
  * the early set and early reset rules above hold exactly.
* **`eo_rca_tb`** runs 406 vectors at 32 bits. Operand bits arrive one at a
  time. It checks that outputs only ever move between spacer and the right
  value. It also checks the exact set of outputs that are valid before `cin`
  arrives.
* **`dr_register_tb`** and **`completion_detector_tb`** check the hold rules
  and the "all bits / no bits" behaviour.
* **`async_rca_stage_tb`** runs the whole stage at its default parameters.
  It uses a 4-phase sender and receiver model, with 1000 random additions and
  3 directed ones. It checks:
  * every result;
  * that no output ever carries a wrong value;
  * that `ackout` never rises before the carry input arrives;
  * that a word is never accepted before the previous one was acknowledged.

  It also counts each mechanism and fails if one never happens: early set,
  early reset, completion-detector wait, and receiver stall.

## How far this follows the publication, and where it departs

Taken from the source:

* the dual-rail encoding and the 4-phase protocol;
* the SAFA gate netlist and its equations;
* the DAFA equations and gate structure (redundant-logic form);
* the 2 SAFA + 15 DAFA arrangement of the 32-bit adder;
* a stage made of registers, completion detectors (OR2 gates plus a
  C-element tree) and the function block;
* registers built from 2-input C-elements;
* the inverted acknowledge between neighbouring stages.

Choices made here, where the source says nothing:

* **Register cell.** Each rail is one C-element with the acknowledge as its
  second input.
* **Clear.** The `rst_n` clear and the resettable C-element.
* **Tree shape.** The completion detector uses a balanced heap-ordered
  C-element tree.
* **Output register.** The output register and its detector stand in for the
  next pipeline stage.
* **Naming.** The `dr_t` struct and the port names.
* **Input buffer.** The non-inverting input buffer is omitted.

Wiring taken from the equations rather than the drawings: the drawings of the
two adders do not show clearly which C-element feeds which sum rail. The
wiring here follows the logic equations. The testbenches confirm that these
equations give the correct sum in every case.

Early reset is only partial. The source says both adders show early reset when
spacers are applied. In the netlist as given, that is true of the carry
outputs and of the DAFA's upper sum bit only when it was set without the
carry. The other sum rails hold until the carry input returns to spacer. This
RTL follows the netlist.

Not modelled:

* gate and wire delays, so no latency, area or power figures;
* the transistor-level C-element;
* the dual-rail to 1-of-4 encoders and decoders, which belong only to the
  heterogeneously encoded adders the design is compared with;
* the comparison adders themselves (other ripple carry, carry lookahead and
  carry select designs).
