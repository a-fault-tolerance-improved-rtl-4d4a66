# A two-gate majority voter that tolerates a fault in itself

Triple modular redundancy (TMR) runs three identical copies of a circuit,
the *function modules*, and passes their outputs X, Y and Z through a
2-of-3 majority voter. The output V stays correct as long as two copies
agree:

    V = XY + YZ + XZ

The usual argument assumes that the voter itself never fails. At small
process nodes that assumption is weak. A fault can strike inside the voter
at the same moment that a function module is wrong. This voter is built so
that a fault inside it is hidden from the output in most situations, even
when one or more function modules are faulty at the same time. It also uses
fewer gates than the textbook voter.

## The voter: G1 and G2

The voter is two gates joined by a single internal net, M:

    G1 (2-input OR):     M = X + Y
    G2 (complex gate):   V = M*Z + X*Y + Y*Z

```
 X ──┐
     G1 ──M──┐
 Y ──┘       │
 Z ──────────┤
 X, Y ───────┼── G2 ──► V
 Y, Z ───────┘
```

If M is correct, G2 computes XZ + YZ + XY + YZ, which is the plain majority.
The trick lies in which terms depend on M. Only the M*Z term does. The terms
X*Y and Y*Z carry the majority on their own whenever Y agrees with one of
the other two inputs. Trace the two ways M can fail:

* **M stuck high (0→1).** M is normally 0 only when X = Y = 0. A wrong 1
  then adds the term Z. This matters only for input 001, where V becomes 1
  instead of 0.
* **M stuck low (1→0).** This removes the term Z·(X+Y). The output is still
  right whenever X*Y or Y*Z holds. It goes wrong only for input 101, where V
  becomes 0 instead of 1.

The same reasoning holds for a transient bit flip and for a permanent
stuck-at fault. Both are modelled as M taking the wrong value.

### The fault enumeration, in full

Column V is the voter's normal output. Column "V with M flipped" is its
output when the internal node is inverted. A case counts as masked when V
still equals the majority of the three inputs the voter actually received.

| X Y Z | module faults           | M (fault-free) | V | V with M flipped | masked? |
|-------|-------------------------|----------------|---|------------------|---------|
| 0 0 0 | none                    | 0              | 0 | 0                | yes     |
| 0 0 1 | one or more             | 0              | 0 | 1                | **no**  |
| 0 1 0 | one or more             | 1              | 0 | 0                | yes     |
| 0 1 1 | one or more             | 1              | 1 | 1                | yes     |
| 1 0 0 | one or more             | 1              | 0 | 0                | yes     |
| 1 0 1 | one or more             | 1              | 1 | 0                | **no**  |
| 1 1 0 | one or more             | 1              | 1 | 1                | yes     |
| 1 1 1 | none                    | 1              | 1 | 1                | yes     |

Six of the eight cases with a faulty M are masked. This gives a *fault
masking ratio* of 6/8 = 0.75. The ratio is the number of fault situations
whose output is still the majority, divided by all fault situations
considered. For comparison, a classical voter (three ANDs into a 3-input
OR) has three internal nodes. Counted the same way over every combination
of faults on them, it masks 24 of 56 cases (0.43). That voter is not part
of this RTL.

### Cost and speed

In a 32/28 nm standard-cell implementation with minimum-size gates, this
voter was reported at 1.88 µW average power, 0.17 ns delay and 5.34 µm² of
area. After logic factoring it needs 18 transistors in static CMOS. A
factoring that reaches 18 is G2 = Z·(M + Y) + X·Y: a 10-transistor
AND-OR-invert plus an inverter, with G1 as NOR plus inverter. The RTL keeps
G2 as the sum of products shown above. The cell mapping is left to
synthesis. None of these physical figures can be checked at RTL.

## RTL

| file                 | module        | what it is |
|----------------------|---------------|------------|
| `rtl/g1_or.sv`       | `g1_or`       | gate G1, M = X + Y |
| `rtl/g2_complex.sv`  | `g2_complex`  | gate G2, V = MZ + XY + YZ |
| `rtl/proposed_mv.sv` | `proposed_mv` | the voter: G1 driving G2 through net `m` |
| `rtl/tmr_system.sv`  | `tmr_system`  | top: voting stage of a TMR system, one voter per output bit |

All four are purely combinational, with no clock and no reset. The path from
any input to `v` is two gate levels. The ports are `x`, `y` and `z` (the
outputs of the three module copies) and `v` (the voted output).
`tmr_system` has one parameter, `WIDTH`. It sets the width of one function
module's output and defaults to 1, the single-bit voter analysed above.
With a larger `WIDTH`, each bit gets its own `proposed_mv`. Bits are voted
independently, so faults in different copies on different bits are all
masked together.

The fault-tolerance figures hold only for this gate structure. A tool that
re-optimises the voter into some other majority network produces a circuit
with different internal nodes and different fault behaviour. The published
voter was mapped to cells with its gate structure preserved. To do the same
here, G1 and G2 are separate modules marked `(* keep_hierarchy *)`, and the
internal net `proposed_mv.m` is marked `(* keep *)`. Tools that ignore these
attributes need an equivalent `dont_touch` or hierarchy-preserving setting.
Keeping `m` as a named net also lets a simulation inject a fault on it.

The function modules are not part of the RTL. They can be any circuit. Their
outputs are the ports of `tmr_system`.

## Where this follows the published design and where it chooses

Taken from the published design:
* the gate types;
* the one internal node;
* the Boolean functions of G1 and G2;
* which inputs feed which product term;
* the fault behaviour in the table above.

This implementation's own choices:
* splitting the voter into three modules, with the keep attributes as the
  means of preserving its structure;
* the `WIDTH` parameter, with bit-wise replication for multi-bit outputs;
* a `timeunit` of 1 ns in every file.

Not built:
* the function modules, because no function is defined for them;
* the three voters used only for comparison (the classical AND-OR voter, a
  priority-encoder voter and an XOR/multiplexer voter);
* anything physical: cell sizing, power, delay, area.

## Testbenches

Each testbench checks itself. Each prints
`TB_RESULT checks=N failures=M` and ends with `$finish`. Each has a
watchdog. Inputs change every nanosecond, and outputs are checked in the same
step, because nothing is clocked. Expected values are worked out without the
voter's formula: the majority comes from counting ones, and the faulty-M
outputs come from the enumeration table.

| testbench                | checks |
|--------------------------|--------|
| `tb/g1_or_tb.sv`         | OR truth table, all 4 input pairs |
| `tb/g2_complex_tb.sv`    | all 8 patterns with correct and with inverted M (M driven directly); masking ratio 6/8 |
| `tb/proposed_mv_tb.sv`   | fault-free truth table; internal fault injected by `force` on `dut.m`; ratio 6/8; 1200 random vectors |
| `tb/tmr_system_tb.sv`    | end to end at default size. Modelled module copies deliver a fault-free value or its inverse. Every mix of 0–3 faulty copies with and without an internal fault, then 2000 random vectors. Counts and requires each event: fault-free vote, single module fault masked, multiple module faults, internal fault masked, internal fault masked alongside a module fault, internal fault exposed |
| `tb/tmr_system_wide_tb.sv` | `WIDTH = 16`: 1500 random words with per-bit faults in different copies |

To run one with Verilator (from the directory holding `rtl/` and `tb/`):

    verilator --binary --timing --assert -Wall -y rtl -y tb +libext+.sv \
        --top-module tmr_system_tb tb/tmr_system_tb.sv
    ./obj_dir/Vtmr_system_tb

To inject an internal fault on a different voter, force
`<path>.u_voter.m`, or `<path>.m` on a bare `proposed_mv`, to the inverse of
X | Y. Release it afterwards.

## Limits

* At RTL, a fault is a wrong logic value on M. Electrical and timing
  masking, and faults inside the transistors of G2, are outside this model.
  The published analysis does not cover them either.
* The 0.75 ratio counts each input pattern once. It assumes the input
  patterns are equally likely, as the published analysis does. With a
  different input distribution, weight the eight faulty-M cases to match.
* A fault on an input wire of G2 is a function-module fault as far as the
  voter can tell. A fault on V itself can never be masked by any voter.
