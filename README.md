# Reversible 4-bit adders built on the Inventive0 gate

A reversible logic gate maps its input vector one-to-one onto an output
vector of the same width, so no information is destroyed and, in principle,
no Landauer energy (kT ln 2 per erased bit) has to be dissipated. The price is
that every gate has as many outputs as inputs: unused results leave the circuit
as *garbage outputs*, and inputs that are not operands must be tied to
*constants*. Reversible designs are therefore compared by gate count, garbage
outputs, constant inputs and delay rather than by transistor count alone.

This design is built around one 4x4 reversible gate, called Inventive0, which
is a full adder when its fourth input is 0 and a full subtractor when it is 1.
With it, a full adder costs one gate, one constant input and two garbage
outputs. Chaining the gate gives a ripple-carry adder and a ripple-borrow
subtractor, and combining the ripple adder with HNG, Fredkin and double-Feynman
gates gives a 4-bit carry-skip adder. The RTL describes these circuits at gate
level, one module per reversible gate. All of it is combinational logic:
there is no clock, no reset and no state.

## The Inventive0 gate (`inventive0_gate`)

Inputs A, B, C, D; outputs

| output | function |
|---|---|
| P | C |
| Q | A ^ B ^ C |
| R | ((A ^ B)·C + A·B) ^ D |
| S | ((A xnor B)·C + ~A·B) ^ ~D |

R contains the full-adder carry of A + B + C. S contains the full-subtractor
borrow of A − B − C. The constant on D picks which of them appears uninverted:

* **D = 0 (adder):** Q = sum, R = carry out. P and S are garbage (S is then the
  inverted borrow).
* **D = 1 (subtractor):** Q = difference, S = borrow out. P and R are garbage
  (R is then the inverted carry).

The C input takes the carry (or borrow) in. The 16 output vectors are all
different, so the gate is reversible. The testbench checks all 16 rows
against the published truth table, reproduced here as {A,B,C,D} → {P,Q,R,S}:

```
0000→0001 0001→0010 0010→1100 0011→1111 0100→0100 0101→0111 0110→1010 0111→1001
1000→0101 1001→0110 1010→1011 1011→1000 1100→0011 1101→0000 1110→1110 1111→1101
```

Note that "A∘B" in the borrow term means XNOR. No other reading reproduces the
table.

## Supporting reversible gates

| module | map | role here |
|---|---|---|
| `hng_gate` | (A,B,C,D) → (A, B, A^B^C, (A^B)C ^ AB ^ D) | with C = D = 0: copies of A and B plus the propagate bit A^B |
| `fredkin_gate` | (A,B,C) → (A, ~A B + A C, A B + ~A C) | a controlled swap; with C = 0, R = A·B (AND); Q is a 2:1 mux selected by A |
| `feynman_gate` | (A,B) → (A, A^B) | with B = 0 it copies A |
| `f2g_gate` | (A,B,C) → (A, A^B, A^C) | double Feynman: with B = C = 0 it gives two copies of A. Built from two `feynman_gate`s |

A reversible circuit may not simply fan a wire out, so every copy of a signal
is made by a gate. That is why the carry-skip adder needs HNG and F2G gates
even though they compute almost nothing.

## Ripple chains (`inventive0_rca`, `inventive0_rcs`)

Both chains have one Inventive0 gate per bit and a `WIDTH` parameter whose
default is 4.

* **Adder:** D = 0 on every stage. Stage i gets a[i], b[i] and the carry from
  stage i−1 (cin for stage 0). Its Q output is sum[i] and its R output is the
  carry into stage i+1. `{cout, sum} = a + b + cin`.
* **Subtractor:** D = 1 on every stage. The borrow runs through the S outputs.
  `diff = (a − b − bin) mod 2^WIDTH` and `bout = 1` when a < b + bin.

For N bits a chain costs N gates and N constant inputs. It has 2N garbage
outputs and a carry path N gates long. Both modules also output the carry or
borrow of every stage (`carry`/`borrow`) and all garbage outputs (`garbage`,
packed as `{S,P}` or `{R,P}` per bit). Nothing is dropped inside the module,
as a reversible circuit requires. Users who do not need these outputs leave
them open.

## Carry-skip adder (`carry_skip_adder`)

This is the most involved circuit. It works in three levels:

1. **Propagate.** Four HNG gates, one per bit, run with C = D = 0. Each one
   passes copies of a[i] and b[i] and outputs p[i] = a[i] ^ b[i]. Its S output
   (a[i]·b[i]) is garbage.
2. **Ripple sum.** The copies feed a 4-bit `inventive0_rca`. It produces `sum`
   and the ripple carry-out c4.
3. **Skip.** Three Fredkin gates, each with C tied to 0, form
   P = (p0·p1)·(p2·p3) on their R outputs. A fourth Fredkin gate has P on its
   control input, c4 on B and cin on C. Its Q output is
   `cout = ~P·c4 + P·cin`. An F2G fed with (cin, 0, 0) makes the two copies of
   cin: one goes to the ripple chain and one to this multiplexer.

When all four bits propagate, the carry-out equals the carry-in. In that case
P routes cin straight to cout, so cout does not wait for the carry to ripple
through four stages. In every other case cout is the ripple carry. Both paths
give the same value, so the skip logic changes only timing, never the result.
In a gate-level RTL simulation that timing difference cannot be seen. The
testbenches therefore check the value on each path and count how often each
path is used.

The module outputs `skip` (= P) and `c4` so that the path taken can be
observed.

Gate inventory: 4 HNG + 4 Inventive0 + 4 Fredkin + 1 F2G. In the cost model
below that totals 50α + 40β + 40δ.

## Top level (`rev_adder_top`)

The top puts the carry-skip adder and the ripple-borrow subtractor side by
side on the same 4-bit operands:

| port | dir | width | meaning |
|---|---|---|---|
| a, b | in | 4 | operands |
| cin | in | 1 | carry in of the adder |
| bin | in | 1 | borrow in of the subtractor |
| sum, cout | out | 4, 1 | a + b + cin |
| skip | out | 1 | the adder's carry took the skip path |
| diff, bout | out | 4, 1 | a − b − bin, bout = 1 on underflow |

The ripple-carry adder is inside the carry-skip adder, so the top contains
every circuit of the design. The operand width comes from `rev_pkg::ADDER_WIDTH`,
which is 4.

## Cost model

Circuit cost is counted as the number of 2-input XORs (α), 2-input ANDs (β) and
NOTs (δ) in the logic each gate's outputs are written with:

| gate | cost |
|---|---|
| Inventive0 | 5α + 4β + 8δ |
| HNG | 5α + 2β |
| Fredkin | 2α + 4β + 2δ |
| F2G | 2α |
| 4-bit ripple adder | 4 × Inventive0 = 20α + 16β + 32δ |
| 4-bit carry-skip adder | 4 HNG + 4 Inventive0 + 4 Fredkin + 1 F2G = 50α + 40β + 40δ |

For a full adder the single Inventive0 gate has 1 gate, 2 garbage outputs,
1 constant input and 1 gate delay. These counts describe the reversible gate
network. They are not the cell counts a synthesis tool reports for the RTL:
the RTL writes each gate's outputs as ordinary Boolean expressions, and a
synthesiser will share and simplify them freely.

## What is specified and what was chosen here

The source specifies these parts, and the RTL follows them:

* the equations of all gates;
* the Inventive0 truth table;
* the constant on D in the adder and the subtractor;
* the carry and borrow chaining of the ripple chains;
* the gate inventory of the carry-skip adder, its three levels and its
  carry-out equation.

The following points were filled in by this implementation:

* **Which Inventive0 outputs carry the results.** One description says the
  adder's results are on R and S. The gate equations, and the adder's own
  statement of sum and carry, put them on Q and R, with the borrow on S. The
  equations are followed, and the truth table confirms them.
* **Pin assignment of the Fredkin gates in the skip logic.** The drawings do
  not fix which Fredkin input takes which signal, or which output is used. For
  the AND tree the gates are used as FRG(x, y, 0).R = x·y. For the multiplexer
  FRG(P, c4, cin).Q is used, because that assignment reproduces the stated
  equation `cout = ~P·c4 ⊕ P·cin`. The ⊕ equals the OR used here, because the
  two product terms are never 1 together.
* **Pin assignment of the HNG gates.** A = a[i], B = b[i], C = D = 0. This is
  the assignment under which the gate yields both operand copies and the
  propagate bit.
* **The F2G equations.** Only the name, its use for fan-out and its cost of
  two XORs are given. The standard double-Feynman map (A, A^B, A^C) is used.
* **Widths.** The ripple chains are parameterised. Their default is the 4 bits
  of every circuit described. The carry-skip adder is fixed at 4 bits, the
  only size described. No multi-block carry-skip cascade is built.
* **The top level.** The adders and the subtractor are described as separate
  circuits. Combining them in `rev_adder_top`, with separate carry-in and
  borrow-in, is an arrangement for convenience.
* **Garbage outputs.** In the ripple chains they are outputs. Inside the
  carry-skip adder and the top level they are left unconnected. Verilator's
  unused-signal warnings on them are expected.

Not included:

* **Transistor-level circuits.** The gates were also realised in
  gate-diffusion-input (GDI) transistor circuits, with PMOS W/L = 2 µm/0.12 µm
  and NMOS W/L = 1 µm/0.12 µm. Their power-versus-supply characterisation is
  not modelled. The RTL captures only their logic function.
* **The Toffoli gate.** It was characterised alongside the other gates but is
  not used by any of the adders, so it is not part of this RTL.

## Verification

Every module has a self-checking testbench in `tb/` named `tb_<module>`. Each
one compares the module with arithmetic or a truth table computed
independently in the testbench. It prints
`TB_RESULT checks=<n> failures=<n>` and has a time-out watchdog.

* Gates: every input vector is applied. The testbench also checks that the
  gate is reversible, meaning all output vectors are distinct.
* `tb_inventive0_rca`, `tb_inventive0_rcs`: all 512 4-bit input combinations,
  including the carry or borrow of every stage. An 8-bit instance is also run
  on 2000 random vectors.
* `tb_carry_skip_adder`: all 512 combinations. It checks `skip` against
  a ^ b == 1111 and checks cout on whichever path was taken. It fails if the
  skip path (with cin = 0 and with cin = 1) or the ripple path is never used.
* `tb_rev_adder_top`: all 1024 combinations of a, b, cin and bin at the
  default size. It counts:
  * skips (64);
  * carries out through the skip path (32);
  * carries out through the ripple chain (480);
  * borrows out of the subtractor (512).

  It fails if any of these counts is zero.

Running one testbench with Verilator:

```
verilator --binary --timing --assert -Irtl rtl/rev_pkg.sv tb/tb_rev_adder_top.sv \
          --top-module tb_rev_adder_top -y rtl -o sim
./obj_dir/sim
```

Replace `tb_rev_adder_top` with any other testbench name. `rev_pkg.sv` must
come first, because the chains and the top import it. Lint with
`verilator --lint-only -Wall rtl/rev_pkg.sv rtl/<module>.sv -y rtl`.
