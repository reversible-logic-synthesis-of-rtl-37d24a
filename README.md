# Fault tolerant carry skip BCD adder from parity preserving reversible gates

A reversible gate maps its k inputs one-to-one onto k outputs, so no
information is erased. A *parity preserving* reversible gate also keeps the
XOR of its outputs equal to the XOR of its inputs. Build a circuit only from
such gates, without fan-out, and a fault that flips any single line changes
the parity. A parity check on the inputs and outputs then detects it.

This RTL describes one digit of a decimal (BCD) adder built that way. It uses
three kinds of gate:

* **IG**, a 4x4 parity preserving gate. Two IG gates make a full adder.
* **Fredkin (FRG)**, the 3x3 controlled swap.
* **PPHCG**, a 4x4 parity preserving gate whose outputs are XORs of three inputs.

The digit has 15 reversible units: 8 full adders, 6 Fredkin gates and 1 PPHCG.
It adds two digits 0..9 and a carry. It returns a digit 0..9, a decimal carry
and 36 *garbage* lines. Garbage lines are the outputs that the arithmetic does
not use. They must exist so that every gate stays reversible.

The RTL models each gate as combinational logic. It has no clock and no
reset. The files describe the logic function and the exact gate netlist. They
do not model a reversible technology.

## The gates

| gate | module | equations |
|---|---|---|
| IG | `ig_gate` | P = A, Q = A^B, R = AB^C, S = BD ^ ~B(A^D) |
| Fredkin | `frg_gate` | P = A, Q = A ? C : B, R = A ? B : C |
| PPHCG | `pphcg_gate` | P = B^C^D, Q = A^B^C, R = A^B^D, S = A^C^D |

Each gate is a permutation of its input patterns, and each preserves parity.
The testbenches check both properties on every input pattern. The IG equations
are also checked against the gate's 16-row truth table.

Only the IG gate is new. The Fredkin gate and the PPHCG come from earlier
literature.

A gate with a constant input does a simpler job:

* Fredkin with C = 0 is an AND gate: R = A&B.
* Fredkin with A as the select line is a 2:1 multiplexer: Q = A ? C : B.
* PPHCG with D = 0 gives a 3-input XOR on Q.
* IG with C = 0 gives XOR on Q and AND on R.

## Fault tolerant full adder (`ftfa`)

```
      IG #1                          IG #2
 A ──┬ P = A ───────────────────┐
 B ──┤ Q = A^B ───────────── a  │  P = A^B          -> G2
 0 ──┤ R = AB  ───────── c      │  Q = A^B^Cin      -> Sum
 0 ──┴ S = A~B -> G1   Cin ── b │  R = (A^B)Cin^AB  -> Cout
                                └ d  S = Cin?A:B    -> G3
```

The full adder has two constant-0 inputs and three garbage outputs. A parity
preserving full adder needs at least that many of each.

The garbage line G2 = A^B is the bit's *propagate* signal. The carry skip
logic reuses it (see below).

Why this is the minimum: the full adder gives S=1, Cout=0 for three different
inputs. Three more output lines are needed to tell those inputs apart and to
fix the parity.

Delay: two gate levels per full adder.

## Ripple carry adder (`ft_rca`)

`ft_rca #(N)` chains N full adders through their carries. It uses 2N IG gates
and 2N constant inputs. It has 3N garbage outputs and a carry path of 2N gate
levels. Cell i's garbage is `g[3i+2:3i] = {G3, G2, G1}`. The default is N = 4,
one BCD digit. Any N works.

## One BCD digit with carry skip (`ft_cs_bcd_adder`)

```
 x,y,cin ─> ft_rca (top row) ──Z[3:0]────────────────┬──> ft_rca (correction) ──> s
               │ C4      │ p3..p0 (G2 lines)          │        ^ y = 0,cout,cout,0
               │         v                            │        │ cin = 0
               │     ft_and4 ──P                      v        │
               v             v                 bcd_carry_logic ┴──> cout
            FRG skip: C = P ? cin : C4 ───────────────^
```

The digit works in four steps.

1. **Binary add.** The top row adds x + y + cin. The result is the binary sum
   Z3..Z0 and the ripple carry C4.
2. **Carry skip.** Three Fredkin AND gates form the block propagate
   P = p0&p1&p2&p3. A fourth Fredkin gate is driven by P, C4 and cin, and its
   Q output is C = P ? cin : C4. When every bit propagates, the ripple carry
   equals cin anyway. Cin therefore goes on at once, without waiting four
   cells. So C is always the true binary carry of the digit, and a chain of
   digits does not ripple through every cell.
3. **Decimal carry.** The digit must be corrected when the binary sum
   C:Z3..Z0 is above 9. Two Fredkin AND gates and the PPHCG compute
   `cout = C | Z3&Z2 | Z3&Z1`. The PPHCG is used as a 3-input XOR in place of
   the OR. This is exact only if no two of the three terms are 1 together.
   The next section covers this.
4. **Correction.** The bottom row adds 0110 (six) to Z when cout = 1, with
   carry in 0. This turns 10..19 into 0..9. The bottom row's carry out is
   garbage.

The 36 garbage lines on `g[35:0]` are numbered as in the published schematic:

| lines | source |
|---|---|
| g0..g7 | top-row cells, `g[2i]` = G1 and `g[2i+1]` = G3 of bit i. G2 of each top-row cell is used as the propagate signal, so it is not garbage. |
| g8..g13 | the three AND4 Fredkin gates (P and Q of each) |
| g14, g15 | the skip Fredkin gate (P and R) |
| g16..g19 | the two decimal-carry Fredkin gates (P and Q of each) |
| g20..g22 | the PPHCG (P, R, S) |
| g23..g34 | correction-row cells, 3 lines each |
| g35 | correction-row carry out |

As in the schematic, some lines feed more than one gate:

* Z1..Z3 feed both the correction row and the decimal carry logic.
* cout feeds two correction cells.

Each gate on its own still preserves parity. The whole digit does not preserve
parity from end to end, because a fanned-out line counts twice.

## The decimal carry: where this RTL departs from the schematic

The published schematic forms the two AND terms as Z3&Z2 and Z3&Z1 and
combines them with C by XOR. These two terms overlap when Z = 1110 or 1111.
That is a binary digit sum of 14 or 15, for example 5+9 or 7+7+1. The XOR then
gives 0, so the digit is not corrected. The result would be the invalid digit
14 or 15 with no carry. This happens for 20 of the 200 possible
(x, y, cin) inputs.

The parameter `MODE` (type `rev_pkg::corr_mode_t`) chooses between the two
versions:

* `CORR_EXCLUSIVE` (default).
  - The first Fredkin gate is FRG(Z2, Z3, 0). It gives R = Z2&Z3 and also
    Q = ~Z2&Z3.
  - The second gate is FRG(Z1, ~Z2&Z3, 0). It gives Z1&~Z2&Z3.
  - The two terms never overlap, and C = 1 only when Z3 = 0. The XOR is
    therefore exactly the OR.
  - The gate count is the same. One line that was garbage (g17) now feeds the
    second gate, which leaves 35 true garbage outputs. The port still shows
    g17.
* `CORR_PAPER`. Builds the schematic's literal terms. Use it only to study
  the published netlist. `tb_bcd_paper_netlist` shows that it is correct
  except at binary sums 14 and 15.

## Other choices made here

* **Carry in of the correction row.** The schematic labels this input "Cin".
  Feeding the digit's carry in there would add it twice. The RTL ties it to 0,
  as the +6 correction needs.
* **Readings of unlabelled wires.** These come from the schematics and are not
  stated in words:
  - In the full adder, the first IG's P = A output drives the second IG's D
    input. This is the only unlabelled wire.
  - The order of the AND4 chain: p0&p1, then &p2, then &p3.
  - Which Fredkin input gets which operand in each AND.
  - Which of the two printed garbage names of a top-row cell is G1 and which
    is G3.
* **Full adder garbage values.** A published table lists the full adder's
  garbage for A=1, B=0, Cin=0 as (G1, G2, G3) = (1, 0, 1). The schematic's
  wiring gives (1, 1, 0). This RTL follows the wiring. The table seems to list
  G2 and G3 swapped.
* **PPHCG equation.** The Q equation of the PPHCG, A^B^C, is the only
  completion of the published symbol that keeps the gate reversible and
  parity preserving.
* **Timing.** Delays quoted as "clock cycles" or "unit delays" are gate levels
  in this RTL, not clocked stages. They are:
  - full adder: 2
  - N-bit ripple carry adder: 2N
  - BCD digit: about 8 + 1 + 3 + 8 on its longest path

## Using it

* A digit accepts x, y in 0..9. Inputs 10..15 are outside its range.
* To add numbers of several digits, chain digits through `cout` → `cin`.
  `tb_bcd_multi_digit` does this for 8-digit numbers.
* Fault detection is not built in. To detect a fault in a gate, compare the
  parity of that gate's inputs (constants included) with the parity of its
  outputs (garbage included).

Files in `rtl/`:

| file | contents |
|---|---|
| `rev_pkg.sv` | `corr_mode_t`, number of garbage lines |
| `ig_gate.sv`, `frg_gate.sv`, `pphcg_gate.sv` | the three gates |
| `ftfa.sv` | full adder from two IG gates |
| `ft_rca.sv` | N-bit ripple carry adder |
| `ft_and4.sv` | block propagate from three Fredkin gates |
| `bcd_carry_logic.sv` | decimal carry: two Fredkin gates and a PPHCG |
| `ft_cs_bcd_adder.sv` | one BCD digit, the top module |

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` at the end.

* **Gates.** Every input pattern is checked:
  - the IG against its truth table and its universal-gate configurations
    (inverter, AND, XOR, XNOR, OR);
  - the Fredkin gate against swap behaviour;
  - the PPHCG against the "XOR of three inputs" rule;
  - every gate for reversibility and parity.
* **`tb_ftfa`.** All 8 inputs. Checks sum, carry, the three garbage lines,
  parity, and that all 8 output patterns differ.
* **`tb_ft_rca`.** The 4-bit adder on all 512 inputs. A 12-bit adder on 2000
  random inputs. Checks the sum, the propagate lines and parity.
* **`tb_ft_and4`.** All 16 inputs. Checks the AND4 result and parity.
* **`tb_bcd_carry_logic`.**
  - Both modes, over every binary sum 0..19.
  - `CORR_EXCLUSIVE` must match "sum > 9" everywhere.
  - `CORR_PAPER` must differ from it only at 14 and 15.
* **`tb_ft_cs_bcd_adder`.** Uses the default parameters. Checks all 200
  (x, y, cin) cases against decimal addition. Also checks the internal binary
  carry. It counts each mechanism and fails if one is never used:
  - the skip path
  - the skip delivering a carry
  - the ripple carry
  - each of the three correction terms
  - the overlapping 14/15 case
* **`tb_bcd_paper_netlist`.** The `CORR_PAPER` digit over all 200 cases.
* **`tb_bcd_multi_digit`.** 8-digit decimal additions through a chain of
  digits, including 99999999 + 1.

To run one testbench with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/rev_pkg.sv \
    tb/tb_ft_cs_bcd_adder.sv --top-module tb_ft_cs_bcd_adder -Mdir obj
./obj/Vtb_ft_cs_bcd_adder
```

Every testbench finishes in well under a second.
