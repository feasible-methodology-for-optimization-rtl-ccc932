# Reversible n:2 compressors built from the Inventive0 gate

A compressor adds several bits of the same weight and hands back fewer bits:
one sum bit of that weight and some carries of double weight. A column of
partial products in a multiplier, for example, can be reduced by 4:2
compressors without waiting on a carry chain. Here every compressor is
built from a single kind of **reversible** cell: a 4-input, 4-output gate
called *Inventive0*. Its input-to-output map is one-to-one, so no
information is thrown away inside the cell. This is the property that
reversible-logic work relies on to cut the energy spent per operation.

The compressors are chains of this cell. Each gate works as a full adder
(D input tied to 0). Its sum feeds the next gate, and every later gate
takes one more primary input and one carry-in. An n:2 compressor needs
n−2 gates. The 4:2 and 5:2 compressors are the two sizes worked out in
the published description of this design (N. K. Misra, M. K. Kushwaha,
S. Wairya, A. Kumar, *Feasible methodology for optimization of a novel
reversible binary compressor*). The n:2 chain is its generalisation.

The RTL describes the **logic function** of the reversible network at
gate level. It is ordinary synthesizable SystemVerilog. A CMOS synthesis
tool will not keep it reversible: it may merge gates and drop the garbage
outputs. The testbenches check reversibility itself: each input vector
gives a different output vector, and inverse gates placed behind a cell
give back its inputs.

## The Inventive0 gate

Inputs A, B, C, D; outputs P, Q, R, S:

| output | function | meaning |
|---|---|---|
| P | A ⊕ B ⊕ C | sum (D=0) or difference (D=1) |
| Q | ((A ⊕ B)·C ⊕ A·B) ⊕ D = maj(A,B,C) ⊕ D | carry when D = 0 |
| R | C | C passed through |
| S | (¬(A ⊕ B)·C ⊕ ¬A·B) ⊕ ¬D = borrow(A−B−C) ⊕ ¬D | borrow when D = 1 |

Tying two inputs gives the uses the gate was designed for:

* C = D = 0: P = A ⊕ B, Q = A·B (XOR and AND)
* C = 1, D = 0: P = ¬(A ⊕ B), Q = A + B (XNOR and OR)
* D = 0: full adder, A + B + C = P + 2Q
* D = 1: full subtractor, A − B − C = P − 2S

The gate is defined as a cascade of self-inverse primitives on the four
wires (A, B, C, D), applied in this order:

1. Toffoli, controls B and C, target D
2. CNOT, control C, target B
3. CNOT, control B, target A (A now holds A ⊕ B ⊕ C)
4. Toffoli, controls A and B, target D
5. CNOT, control D, target B (B now holds Q)
6. NOT on D (D now holds S)

`rtl/inventive0_gate.sv` is written as this cascade, one assignment per
step. The cascade gives exactly the output equations above and the gate's
16-row truth table. Applying the same steps in reverse order undoes the
gate, because each primitive is its own inverse.
`tb/inventive0_inverse.sv` is that inverse. The testbenches use it to
recover a gate's inputs, or a whole 4:2 cell's inputs, from the outputs.

Published cost of one gate: quantum cost 10. Logic complexity
T = 7α + 4β + 3δ, where α counts two-input XORs, β two-input ANDs and
δ inverters.

## From gate to compressor

### 4:2 cell (`rev_compressor_4to2`)

```
 I1 I2 I3  0            S1  I4  Cin  0
  A  B  C  D             A   B   C   D
 [ Inventive0 #1 ]      [ Inventive0 #2 ]
  P=S1 ──────────────────┘
  Q=C1                   P=S2   Q=C2
  R,S = garbage go[1],go[2]    R,S = garbage go[3],go[4]
```

    I1 + I2 + I3 + I4 + Cin = S2 + 2·(C1 + C2)

C1 is the carry of I1..I3 alone, so it does not depend on Cin. In a row of
4:2 cells, C1 of one column becomes the Cin of the next column, and no
carry ripples along the row. C2 and S2 go on to the next reduction stage.
The cell has 2 gates, 2 constant inputs (the two D = 0), 4 garbage outputs
and quantum cost 20.

### 5:2 cell (`rev_compressor_5to2`)

The 5:2 cell is the 4:2 cell, with Cin renamed Cin1, followed by a third
gate on (S2, I5, Cin2, 0):

    I1 + … + I5 + Cin1 + Cin2 = S3 + 2·(C1 + C2 + C3)

C1 depends on no carry-in and C2 only on Cin1. The cell has 3 gates,
3 constant inputs, 6 garbage outputs and quantum cost 30. The RTL
instantiates the 4:2 cell for the first two gates.

### n:2 chain (`rev_compressor_nto2`, top level)

Parameter `N` (default 5, must be ≥ 4). Gate 1 adds in[1..3]. For
k = 2 … N−2, gate k adds the previous sum, in[k+2] and cin[k−1], and
produces cout[k]. The sum of the last gate is `sum`.

    Σ in + Σ cin = sum + 2·Σ cout

| N | gates | carry-ins | carries out | constant inputs | garbage outputs | quantum cost | XOR/AND/NOT |
|---|---|---|---|---|---|---|---|
| 4 | 2 | 1 | 2 | 2 | 4 | 20 | 14/8/6 |
| 5 | 3 | 2 | 3 | 3 | 6 | 30 | 21/12/9 |
| n | n−2 | n−3 | n−2 | n−2 | 2n−4 | 10(n−2) | 7/4/3 per gate |

For N = 4 the chain is the 4:2 cell. For N ≥ 5 it is the 5:2 cell plus
N−5 further gates. cout[k] depends only on cin[1..k−1]. The longest path is
the sum chain through all N−2 gates, and it grows linearly with N. The
default N = 5 is the largest size given in full in the original
description, which leaves n general. `rtl/rev_pkg.sv` computes these
counts as functions of n.

Counting the lines shows that the chain is square: N + (N−3) + (N−2)
input lines (data, carry-ins, ancillas) against (N−2) + 1 + 2(N−2) output
lines, both 3N−5. This is why the garbage outputs are brought out as
ports instead of being left unconnected.

## Files and interfaces

All modules are combinational and have no clock or reset. Bit k of every
vector is the signal numbered k in the description (`i[3]` is I3), so the
ranges start at 1.

| file | contents |
|---|---|
| `rtl/rev_pkg.sv` | `inv0_out_t` (P, Q, R, S of one gate); cost constants of one gate; `nto2_gates`, `nto2_constant_inputs`, `nto2_garbage_outputs`, `nto2_quantum_cost`, `nto2_xor_count`, `nto2_and_count`, `nto2_not_count` |
| `rtl/inventive0_gate.sv` | `a b c d` → `p q r s` |
| `rtl/rev_compressor_4to2.sv` | `i[4:1]`, `cin` → `c1`, `c2`, `s2`, `go[4:1]` |
| `rtl/rev_compressor_5to2.sv` | `i[5:1]`, `cin1`, `cin2` → `c1`, `c2`, `c3`, `s3`, `go[6:1]` |
| `rtl/rev_compressor_nto2.sv` | `in[N:1]`, `cin[N-3:1]` → `cout[N-2:1]`, `sum`, `go[2N-4:1]` |

Garbage outputs: `go[2k-1]` is R and `go[2k]` is S of gate k. R of gate 1
equals I3, and R of gate k > 1 equals that gate's carry-in. The S outputs
are inverted borrows. A design that does not need the map to stay
reversible can leave them open.

## Where this RTL interprets or departs from the published description

* **Quantum-circuit labels.** The quantum-level drawings of the 4:2 and
  5:2 cells print output labels (C1 on the I1 line, a sum on an ancilla
  line) that do not match what the gate cascade computes on those wires.
  The RTL follows the block diagrams and the step-by-step construction
  algorithm, which agree with each other and with the gate's truth table.
* **5:2 outputs.** The prose names the 5:2 outputs C2 and S2, but the block
  diagram shows C3 and S3 from the third gate, with C1 and C2 brought out
  as well. The RTL follows the diagram.
* **Quantum cost of the chain.** A closed form of 10(n−3) is stated for
  n:2 compressors. It contradicts the worked figures (20 for 4:2, 30 for
  5:2), so the package uses 10 per gate, 10(n−2). The garbage count 2n−4
  and the gate and ancilla count n−2 are used as stated.
* **Small n.** The construction algorithm falls back to a single "initial"
  gate for n ≤ 4. The RTL uses the two-gate 4:2 cell for N = 4 and rejects
  N < 4.
* **This design's own choices:** the order of the garbage bits, the 1-based
  port vectors, the default N = 5, and building the 5:2 and n:2 chains from
  the smaller cells. The resulting gate network is the published one.
* **Not modelled.** The realisation of the gate from controlled-V and
  controlled-V⁺ quantum primitives (quantum cost 10) has no two-valued
  logic form. The accompanying transistor-level Gate Diffusion Input (GDI)
  cells of seven standard reversible gates (Feynman, double Feynman,
  Toffoli, Fredkin, Peres, BJN and URG) are analog circuits, and the compressor
  does not use them.

## Verification

Each testbench applies every possible input vector. It computes the
expected outputs from bit counts, not from the gate equations, and prints
`TB_RESULT checks=<n> failures=<n>`. Each testbench has a watchdog.

| testbench | what it covers |
|---|---|
| `tb_inventive0_gate` | all 16 rows of the published truth table (typed in verbatim); one-to-one map; XOR/AND, XNOR/OR, full-adder and full-subtractor uses; gate followed by its inverse returns the inputs |
| `tb_rev_compressor_4to2` | 32 vectors: count identity, C1 independent of Cin, C2, S2, every garbage line, one-to-one map, inverse of the cell recovers I1..I4, Cin and zero ancillas; cost functions against the published 4:2 figures |
| `tb_rev_compressor_5to2` | 128 vectors: the same checks for three gates; cost functions against the 5:2 figures |
| `tb_rev_compressor_nto2` | top level at its default size (N = 5), all 128 vectors through `tb/nto2_checker.sv`; counts how often each carry is generated, the sum is set, and all carries are set at once, and fails if any of these never happens |
| `tb_rev_compressor_nto2_sizes` | the top at N = 4, 5 and 8 (8192 vectors for N = 8), with the same checker |

Simulating with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing -y rtl -y tb +libext+.sv rtl/rev_pkg.sv \
    tb/tb_rev_compressor_nto2.sv --top-module tb_rev_compressor_nto2
./obj_dir/Vtb_rev_compressor_nto2
```

Replace the testbench name to run any other testbench. Lint a module with
`verilator --lint-only -Wall -y rtl rtl/rev_pkg.sv rtl/<module>.sv`. To
try another chain length, override `N` on `rev_compressor_nto2` and on
`nto2_checker`, as `tb_rev_compressor_nto2_sizes` does. The checker is
exhaustive over 2N−3 input bits, so keep N at about 12 or below.
