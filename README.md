# Reversible n-bit comparator and n-to-2^n decoder built around a 4x4 "Inventive" gate

A reversible gate maps each input pattern to a different output pattern, so
no information is destroyed. Circuits built only from such gates are studied
because erasing a bit has a minimum energy cost (kT ln 2). Three numbers
describe the cost of such a circuit: its gate count, the constant inputs it
needs, and the "garbage" outputs it must produce but does not use.

This RTL implements a family of reversible circuits centred on one 4x4 gate,
here called the Inventive gate:

- **A group-based n-bit magnitude comparator.** The comparison ripples from
  the most significant bit down through a chain of identical cells. It
  produces equal, greater and less.
- **An n-to-2^n decoder.** A 2-to-4 cell plus one rank of Fredkin gates per
  further address bit.
- **A set of one-gate functions.** AND, NAND, OR, NOR, XOR, XNOR, NOT, half
  and full adder, half and full subtractor. Each one is the same gate with
  some inputs tied to constants.

The structures, cell definitions and cost formulas follow N. K. Misra,
S. Wairya and V. K. Singh, "Evolution of structure of some binary group
based n-bit comparator, n-to-2^n decoder by reversible technique" (VLSICS
5(5), 2014). The publication leaves a number of points open or prints them
inconsistently. Those choices are listed in the section "Where this RTL
reads the source differently" below.

Everything is combinational. There is no clock, reset or register anywhere.
Each gate is its own module, so the netlist mirrors the reversible circuit
gate for gate. The garbage outputs are kept and brought out as ports, so
their count can be checked against the cost formulas.

## The Inventive gate

`inventive_gate` has inputs a, b, c, d and outputs

```
P = a ^ b ^ c
Q = ((a ^ b) ^ d) & c  ^  b & (a ^ d)
R = a'(b'c' + d') + b c
S = b'd'(a + c) + d (b + a'c')
```

All 16 input patterns give distinct outputs. The testbench checks this and
compares every output with the published truth table. The source gives R
in two forms. This RTL uses the only form that agrees with the truth table,
with separate bars on b, c and d. The overlined products in S need the same
reading.

The two constant settings used most often are these:

| d | c | P        | Q    | R      | S        | used in                          |
|---|---|----------|------|--------|----------|----------------------------------|
| 1 | 0 | a ^ b    | a'b  | a'b'   | a' + b   | comparator I_N cell, 2-to-4 decoder |
| 0 | 0 | a ^ b    | ab   | ...    | ...      | half adder                       |

## The comparator chain

`rev_comparator #(N)` is the core of the design. It has three kinds of cell.

```
 a[N-1],b[N-1]      a[N-2],b[N-2]            a[0],b[0]
      |                  |                       |
  +--------+  Q,P   +-----------+  Q,P      +-----------+  Q,P  +------+
  |  I_N   |------->| TR_BME_FG |--> ... -->| TR_BME_FG |------>| F_F  |--> gt, eq, lt
  +--------+        +-----------+           +-----------+       +------+
```

Two lines run along the chain:

- **Q, "equal so far".** All bits above the current position match.
- **P, "greater so far".** a > b has already been decided above the
  current position.

"Less so far" is not carried. It is the case where neither line is 1.

**I_N cell** (`in_cell`). An Inventive gate with d = 1 and c = 0, plus two
NOT gates, compares the top bit pair:

- e = (a ^ b)' starts Q.
- g = ab' starts P.

The cell also gives l = a'b, which the chain does not use. Its one garbage
line is R = a'b'. Cost: 3 gates, 2 constant inputs, 1 garbage output.

**TR_BME_FG cell** (`tbf_cell`) handles one lower bit pair:

```
q_out = q_in & (a ^ b)'
p_out = (q_in & a & b') ^ p_in
```

- A TR gate fed (a, b, 0) gives a ^ b and ab'.
- A NOT gate turns a ^ b into the bit equality.
- A BME gate with A = q_in and C = 0 ANDs both of them with q_in.
- A Feynman gate XORs "decided greater here" into p_in.

The XOR can stand in for an OR because the two terms are never 1 together:
once p_in is 1, q_in is 0. Cost: 4 gates, 2 constant inputs, 4 garbage
outputs. Those outputs are the TR and BME pass-through lines, the BME S
output and the Feynman pass-through.

**F_F cell** (`ff_cell`) adds the third result. Exactly one of "greater",
"equal" and "less" holds, and P and Q are never both 1, so
less = (P ^ Q)'. The cell is:

1. a Feynman gate (Q, 0), which makes a copy of Q;
2. a second Feynman gate (P, copy), which forms P ^ Q;
3. a NOT gate.

Cost: 3 gates, 1 constant input, no garbage.

Worked example, N = 4, a = 1011, b = 1001:

| position | a b | Q after | P after | note                   |
|----------|-----|---------|---------|------------------------|
| 3 (I_N)  | 1 1 | 1       | 0       | equal so far           |
| 2        | 0 0 | 1       | 0       |                        |
| 1        | 1 0 | 0       | 1       | decided: greater       |
| 0        | 1 1 | 0       | 1       | Q = 0 freezes the result |

The F_F cell then gives gt = 1, eq = 0, lt = (1 ^ 0)' = 0.

**Ports.** a and b are N-bit unsigned. The outputs are eq, gt and lt, and
exactly one of them is 1. `garbage` is 1 + 4(N-1) bits wide:

- bit 0 comes from the I_N cell;
- bits [1+4i +: 4] come from the cell of bit i.

**Cost and delay.** For N bits the comparator uses 6 + 4(N-1) gates and
1 + 2N constant inputs, and produces 1 + 4(N-1) garbage outputs. The package
`rev_pkg` computes these. For 8, 16 and 32 bits that gives garbage 29, 61 and
125 and constants 17, 33 and 65. The critical path passes through every cell,
so the delay grows linearly with N. That is a deliberate trade of speed for a
low gate and garbage count, compared with tree comparators.

The default is N = 32, the largest width the source works through. Any
N >= 2 elaborates: the testbenches use 2, 8, 16, 32 and 64.

## The decoder

**I_F_T 2-to-4 cell** (`ift_decoder_cell`) is five gates:

1. A Feynman gate (b, 0) makes two copies of b.
2. An Inventive gate with d = 1 and c = 0 takes a and one copy of b. It
   gives a'b on Q and a'b' on R directly.
3. A NOT on S (a' + b) gives ab'.
4. A NOT on P gives (a ^ b)'.
5. A Toffoli gate ((a ^ b)', copy of b, 0) forms (a ^ b)'b = ab.

The Toffoli's two pass-through lines are the cell's two garbage outputs. The
outputs are numbered by minterm: m[{a,b}].

**n-to-2^n decoder** (`rev_decoder #(N)`). Each further address bit adds one
rank of Fredkin (controlled-swap) gates, one per minterm built so far. The
gates are fed as follows:

- A gets the new bit.
- B gets the minterm.
- C gets 0.

Each gate then outputs minterm & ~bit and minterm & bit. The bit also
leaves the gate unchanged on P, which feeds the next gate's control. So one
address bit serves a whole rank with no separate fan-out gates. Only the
control line leaving the last gate of each rank is garbage.

The totals are:

- 2^N + 1 gates;
- N garbage outputs: two from the cell, then one per rank.

The first two bits decoded are the most significant. `y[k]` is 1 exactly when
`x == k`. The default is N = 3.

## The one-gate function set

`ig_logic_set` runs eight copies of the Inventive gate on operands x, y and z.
The constants (a, b, c, d) of each copy are:

| copy | constants (a, b, c, d) | result                                  |
|------|------------------------|-----------------------------------------|
| 1    | (0, x, 0, y)           | Q = AND, R = NAND                       |
| 2    | (x, 0, y, 0)           | P = XOR, R = NOT x, S = OR              |
| 3    | (x, 0, y, 1)           | S = NOR                                 |
| 4    | (1, x, y, y)           | P = XNOR                                |
| 5    | (x, y, 0, 0)           | half adder (P sum, Q carry)             |
| 6    | (x, y, 0, 1)           | half subtractor x - y (P diff, Q borrow) |
| 7    | (x, y, z, 0)           | full adder (P sum, Q carry)             |
| 8    | (x, y, z, 1)           | full subtractor x - y - z (P diff, Q borrow) |

The full subtractor is the one function here that takes a single gate of
this type and that other published reversible gates do not offer. Its borrow
is Q = (x ^ y)'z ^ x'y. The results come out as fields of the packed struct
`rev_pkg::ig_func_t`.

## Top level

`rev_chip_top #(CMP_N = 32, DEC_N = 3)` places the comparator, the decoder
and the function set side by side, each with its own pins, garbage
included. The source does not say how these units would share a chip, or
whether they would at all. Nothing connects them.

## Where this RTL reads the source differently

- **P and Q on the comparator chain.** The cell equations
  Q_{n-1} = Q_n (a ^ b)' and P_{n-1} = Q_n ab' ^ P_n only compare correctly
  when Q means "equal" and P means "greater". The final-cell drawings label
  the outputs "P = E" and "Q = G", and the step-by-step algorithm also calls
  P the equality result. This RTL follows the equations. It names the
  comparator outputs eq, gt and lt by function.
- **Gate R of the Inventive gate.** The text's form (NOT(bc) + d)a' + bc
  contradicts the truth table, so the drawn form a'(b'c' + d') + bc is used.
- **Full subtractor constants.** They are drawn as d = 0, c = 0, but the
  drawn borrow equation needs d = 1 and the borrow-in on c. This RTL uses
  d = 1 with the borrow-in on c. Two other drawn labels are wrong for the
  inputs shown. Fig. 1a's S is d, not bd. In the I_N cell, R is a'b', not a'.
- **BME gate.** Its equations are used as published. As published they are
  not one-to-one: with A = 0, Q and R both equal C. So the TR_BME_FG cell, as
  specified, does not keep all its input information in its outputs. The
  comparator's results are unaffected.
- **Toffoli and Fredkin gates** are named but not defined in the source.
  The standard definitions are used.
- **Gate counts quoted in prose.** The prose gives 4 gates for the 2-to-4
  decoder and 7 for the 3-to-8 decoder. The lemmas and drawings give 5 and 9,
  and the RTL has 5 and 9. The prose count of 33 for the 32-bit comparator
  counts cells; in gates it is 130.
- **Decoder control order.** The Fredkin control line is chained through the
  minterms in index order rather than the drawn order. No output changes.
- **Bit and output numbering** (MSB first, one-hot `y[x]`) is this design's
  choice. The source is not specific.

## Not included

- **Approach 1 of the decoder.** The source's second 2-to-4 cell uses two
  Feynman gates and 2^n + 2 gates in all. It is presented as the weaker
  alternative, so it is not built.
- **The Peres gate.** It is defined in the source but used by none of its
  circuits.
- **The transistor-level (90 nm) versions of the cells.** Also left out are
  the power, delay and power-delay figures measured on them. Those include
  the linear fits (85.81n - 78.98) uW and (115.010n - 100.854) ns. None of
  this has an RTL counterpart.

## Verification

Each testbench in `tb/` checks itself and prints
`TB_RESULT checks=N failures=M`. Each has a watchdog.

| testbench              | covers                                                                 |
|------------------------|------------------------------------------------------------------------|
| `inventive_gate_tb`    | all 16 rows against the published truth table, and the gate being one-to-one |
| `prim_gates_tb`        | TR, BME, Feynman, Toffoli, Fredkin, exhaustively, against independent definitions; one-to-one except BME |
| `ig_logic_set_tb`      | every function for all 8 operand patterns, against operators and integer add/subtract |
| `comparator_cells_tb`  | I_N, TR_BME_FG and F_F for every bit pair and every valid incoming state, garbage lines included |
| `rev_comparator_tb`    | N = 2, 8, 16, 32 and 64. All 65,536 pairs for 8 bits. A decision forced at every chain position. Equal, corner and random pairs. Garbage widths and constant counts against the published values |
| `rev_decoder_tb`       | the 2-to-4 cell and N = 2, 3, 4, 5 and 8 for every address; garbage widths and gate counts |
| `rev_chip_top_tb`      | the whole top at default sizes. Every output is checked, and coverage counters must show each comparator outcome, a decision at each of the 32 positions, each decoder line, and each function output at 0 and at 1 |

Each testbench was also run against a copy of its module with one deliberate
fault, for example a missing NOT gate or swapped chain lines. Every one of
those faults was caught.

To run a testbench with Verilator 5:

```
verilator --binary --timing -y rtl --top-module rev_chip_top_tb -o sim \
          rtl/rev_pkg.sv tb/rev_chip_top_tb.sv
./obj_dir/sim
```

To run another testbench, replace the testbench name in both places.
`-y rtl` lets Verilator find each module in `rtl/<module>.sv`. The package
must be listed first. Lint warnings about unused signals are expected: they
are the garbage outputs of gates whose spare lines the circuits leave open.

## Changing sizes

- Comparator width: `rev_comparator #(.N(n))`, or `CMP_N` on the top, for
  any n >= 2.
- Decoder address width: `rev_decoder #(.N(n))`, or `DEC_N`, for any
  n >= 2. The decoder grows as 2^n.
- Garbage port widths follow from the `rev_pkg` functions `cmp_garbage` and
  `dec_garbage`. `cmp_gates`, `cmp_consts` and `dec_gates` give the other
  costs.

## Files

- `rtl/rev_pkg.sv`: cost functions and the function-set struct.
- `rtl/inventive_gate.sv`, `tr_gate.sv`, `bme_gate.sv`, `feynman_gate.sv`,
  `toffoli_gate.sv`, `fredkin_gate.sv`: the gates.
- `rtl/in_cell.sv`, `tbf_cell.sv`, `ff_cell.sv`, `rev_comparator.sv`: the
  comparator.
- `rtl/ift_decoder_cell.sv`, `rev_decoder.sv`: the decoder.
- `rtl/ig_logic_set.sv`: the one-gate function set.
- `rtl/rev_chip_top.sv`: the top level.
- `tb/*_tb.sv`: the testbenches listed above.
