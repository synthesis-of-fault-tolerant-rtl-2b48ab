# Fault tolerant reversible adders from parity preserving gates

A reversible circuit loses no information: every output pattern maps back to
exactly one input pattern, so in principle it need not dissipate the
`kT ln 2` per erased bit that ordinary logic does. Reversible gates are
also the building blocks of quantum and optical logic. This RTL models
reversible gates that also **preserve parity**: the XOR of all a gate's
outputs always equals the XOR of all its inputs. Build a network only from
such gates, with no fan-out, and the same holds for the whole network. Any
fault that flips a single line anywhere inside then shows up as a parity
mismatch between the network's primary inputs and its primary outputs,
garbage outputs included. No checking is needed between the gates.

The design follows the circuits of Islam, Rahman, Begum, Hafiz and Mahmud,
"Synthesis of Fault Tolerant Reversible Logic Circuits". It includes:

* the 4x4 **IG gate**, a new parity preserving and universal reversible gate;
* a **fault tolerant full adder** (FTFA) made of only two IG gates;
* an **N-bit ripple carry adder** built from FTFAs;
* a **parity preserving Toffoli gate** made of one Fredkin gate and one
  Feynman double gate;
* a **parity checker** per circuit that turns "parity preserved" into a
  fault flag.

Everything here is combinational. The reversible circuits have no clock. A
"clock cycle" or "unit delay" in their cost figures means one gate level.

## The IG gate (`rtl/ig_gate.sv`)

```
P = A
Q = A ^ B
R = A·B ^ C
S = B·D ^ B'·(A ^ D)
```

| ABCD | PQRS | ABCD | PQRS |
|------|------|------|------|
| 0000 | 0000 | 1000 | 1101 |
| 0001 | 0001 | 1001 | 1100 |
| 0010 | 0010 | 1010 | 1111 |
| 0011 | 0011 | 1011 | 1110 |
| 0100 | 0100 | 1100 | 1010 |
| 0101 | 0101 | 1101 | 1011 |
| 0110 | 0110 | 1110 | 1000 |
| 0111 | 0111 | 1111 | 1001 |

When A=0 the gate is the identity. When A=1 it inverts B, and B then
selects between `C -> R, ~D -> S` and `~C -> R, D -> S`. Each
half of the table is a permutation, and each row keeps its number of ones
odd or even, so the gate is reversible and parity preserving. The same
gate also serves as a universal building block. With A=1 it gives
`Q = B'` and `R = B ^ C`, an inverter and an XOR. With C=0 it gives
`Q = A ^ B` and `R = A·B`, an XOR and an AND. The gate's testbench checks
both uses.

In the published truth table of the gate, rows 1000 and 1001 both show the
output 1001. That pair is neither reversible nor parity preserving. The
gate's equations give 1101 and 1100 for these rows, and this RTL follows
the equations. The operation count of the equations (4 XOR, 3 AND, 1 NOT
per gate) also matches the published cost of the full adder below.

## The two-gate full adder (`rtl/ftfa.sv`)

```
            +-------+  P = A ---------------------------+
  A ------->|       |  Q = A^B ------------+            |
  B ------->|  IG1  |  R = AB ---------+   |            |
  0 ------->|       |  S = AB'   (G1)  |   |            |
  0 ------->|       |                  |   |            |
            +-------+                  |   |   +-------+|
                                       |   +-->| a     |  P = A^B              (G2)
  Cin ---------------------------------|------>| b IG2 |  Q = A^B^Cin          = Sum
                                       +------>| c     |  R = (A^B)Cin ^ AB    = Cout
                                            +->| d     |  S = Cin·A ^ Cin'·B   (G3)
                                            |  +-------+
                               (P of IG1) --+
```

The first IG, with its C and D inputs held at 0, produces the half-adder
terms A^B and AB. The second IG adds Cin to them. Its Q output is the sum,
and its R output, `(A^B)·Cin ^ AB`, is the carry. The adder has two
constant inputs and three garbage outputs. This is the minimum for a
parity preserving full adder: the three inputs that give Sum=1 and Cout=0
must be told apart by the garbage lines, while parity is kept.

Which line enters the fourth input of IG2 is not labelled in the original
drawing. The only output of IG1 not yet used is P=A, so it goes there. A
reversible circuit may not drop a line, and the constant and garbage
counts leave no other choice. The choice affects only G3 (`Cin ? A : B`).
Sum and Cout do not depend on it. With this wiring the garbage for
A=1, B=0, Cin=0 is G1G2G3=110. The paper's table of repeated output
patterns, an illustration in its minimality proof, shows 101 for that row.
Both values keep parity and tell that row apart from the other two.

Port order: `garbage[0]=G1`, `garbage[1]=G2`, `garbage[2]=G3`.
`const_in[1:0]` holds the C and D inputs of IG1. The constants are ports
only so that the parity checker can see every input line. In use they are 0.

## Ripple carry adder (`rtl/ft_rca.sv`)

N FTFAs in series. Stage i takes `a[i]`, `b[i]` and the carry of stage
i-1, and stage 0 takes `cin`. Stage i uses `const_in[2i+1:2i]` and drives
`garbage[3i+2:3i]`. The cost figures are exposed as localparams:

| figure | value | localparam |
|---|---|---|
| reversible gates | 2N IG | `GATE_COUNT` |
| garbage outputs | 3N | `GARBAGE_COUNT` |
| constant inputs | 2N | `CONST_COUNT` |
| unit delay, as the source counts it (2 per stage) | 2N | `UNIT_DELAY` |

The true longest path is shorter: all first IGs work in parallel, and the
carry then passes through one IG per stage, N+1 levels in all. `N`
defaults to 4, the width of the published example. Any N of 1 or more
elaborates.

## Parity preserving Toffoli gate (`rtl/pp_toffoli.sv`)

The Toffoli gate (`P=A, Q=B, R=AB^C`) does not preserve parity. Here it is
rebuilt from two parity preserving gates from the literature:

1. a Fredkin (controlled-swap) gate, `frg_gate`, with inputs (A, B, 0),
   gives A, A'B and AB;
2. a Feynman double gate, `f2g_gate` (`P=A, Q=A^B, R=A^C`), with inputs
   (AB, A'B, C), gives AB (garbage), `AB ^ A'B = B` and `AB ^ C`.

The circuit has two gates, one constant input and one garbage output. It
costs 4 XOR, 4 AND and 1 NOT. The drawing does not say which Feynman input
the A'B line enters, but only the middle input gives Q=B.

## Fault detection (`rtl/parity_checker.sv`)

`fault = ^in_vec ^ ^out_vec`. The checker XORs all input lines of a
circuit, constants included, and all its output lines, garbage included.
The source gives this detection scheme only in words. The checker itself
is ordinary irreversible logic, added here so the property can be
observed. Some limits:

* Any single flipped line inside a parity preserving network with no
  fan-out is detected. It flips the parity of the gate it enters, and
  every later gate passes that parity on. A stuck-at fault is detected
  whenever it is active, that is, when the stuck value differs from the
  fault-free one.
* Two flipped lines cancel out and are not detected. The checker does not
  correct anything, and it does not check itself.
* A fault is flagged even when it reaches only garbage lines and the sum
  is still right. The end-to-end test counts the detected faults that did
  corrupt the result apart from those that did not.

## Top level (`rtl/ft_reversible_top.sv`)

The top holds the two circuits side by side. They are not connected to
each other: the source presents them as separate circuits.

| port | dir | width | meaning |
|---|---|---|---|
| `a`, `b` | in | N | adder operands |
| `cin` | in | 1 | carry in |
| `sum`, `cout` | out | N, 1 | adder result |
| `rca_garbage` | out | 3N | adder garbage |
| `rca_fault` | out | 1 | adder parity mismatch |
| `tg_a`, `tg_b`, `tg_c` | in | 1 | Toffoli inputs |
| `tg_p`, `tg_q`, `tg_r` | out | 1 | A, B, AB^C |
| `tg_garbage` | out | 1 | AB |
| `tg_fault` | out | 1 | Toffoli parity mismatch |

All constant inputs are tied to 0 inside the top. The top has no clock and
no reset.

## Verification

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=… failures=…`:

| testbench | what it checks |
|---|---|
| `tb_ig_gate` | all 16 rows against the table above, reversibility, parity, inverter/XOR/AND uses |
| `tb_frg_gate`, `tb_f2g_gate` | all 8 rows, reversibility, parity |
| `tb_pp_toffoli` | Toffoli function, garbage AB, reversibility and parity over all 16 patterns with the constant |
| `tb_ftfa` | sum and carry against A+B+Cin, the garbage values, reversibility and parity over all 32 patterns |
| `tb_ft_rca` | 4-bit exhaustive and 8-bit random sums, parity with random constants, 2N/3N/2N/2N cost figures |
| `tb_parity_checker` | random vectors, single-bit flips on either side |
| `tb_ft_reversible_top` | the whole top at default size: all adder and Toffoli inputs fault-free, then every internal line stuck at 0 and at 1 under every input pattern |

The top-level test injects faults with `force`/`release` on internal nets.
These are the three lines between the two IGs of each stage and every
carry, 16 sites in all, plus the two lines inside the Toffoli circuit.
Every active fault (8192 adder cases, 16 Toffoli cases) must raise the
flag, and every inactive one must leave the results correct and the flag
low. The test also counts a full-width carry ripple, carry-out overflow
and the Toffoli's inverting case, and it fails if any of these never
happens.

To run a testbench with Verilator 5:

```
verilator --binary --timing -Irtl tb/tb_ft_reversible_top.sv rtl/*.sv \
          --top-module tb_ft_reversible_top
./obj_dir/Vtb_ft_reversible_top
```

Each testbench finishes in well under a second.

## Departures and own choices

* The IG gate follows its equations, not the two mismatched truth-table
  rows (see above).
* The FTFA's fourth IG2 input is A, which is inferred, not labelled. The
  resulting garbage pattern for A=1, B=0, Cin=0 differs from the proof's
  illustration table.
* The ripple adder's per-stage equations appear in the source with AND
  symbols where XOR is meant. The RTL uses the full adder's XOR form.
* The parity checker, the constant-input ports and the combined top are
  additions needed to observe and exercise the circuits. The source draws
  none of them.
* The gates are modelled as plain Boolean logic. Nothing here models
  reversible or adiabatic hardware, energy, or the delay of a gate level.
