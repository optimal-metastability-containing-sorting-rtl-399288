# Metastability-containing sorting networks

Sometimes a value has to be digitised at a moment nobody controls, for example the output of a
time-to-digital converter or a counter read across clock domains. Then one of its bits can be
caught halfway through a transition and become *metastable*. Usually such a bit goes through a
synchronizer first, which costs time, or the bit is simply allowed to be wrong. This design does
something else. It sorts such values directly, with purely combinational logic, and
*contains* the metastability: a sorted output is only as uncertain as the inputs force it to be.
No clock, no synchronizer and no masking register is involved.

The RTL implements a B-bit two-input sorter (the "2-sort") with O(log B) depth and O(B) gates,
and sorting networks built from it. It follows the construction of Bund, Lenzen and Medina,
"Optimal Metastability-Containing Sorting Networks". The wording, the code and the
verification here are independent of that publication.

## 1. What is being sorted

**Gray code.** Inputs are B-bit binary reflected Gray codes. Bit 1 is the first, most significant
bit; in the RTL it is `g[B-1]`. Between two consecutive values x and x+1 exactly one bit changes.
If that bit is caught mid-transition, it reads as M (metastable) and the others stay stable.

**Valid strings.** A string is valid if it is a codeword, or if it is code(x) with the one bit where
code(x) and code(x+1) differ replaced by M. Valid strings have a natural total order, in which
x, then "x or x+1", then x+1 follow one another:

    0000 < 000M < 0001 < 00M1 < 0011 < 001M < 0010 < 0M10 < 0110 < ...

**What the 2-sort must output.** For each output bit, take every way of resolving the M bits of the
inputs to 0 or 1 and sort the resulting stable codes. If the bit has the same value in every case,
the output must show that value. Otherwise it must be M. This is the *metastable closure* of max
and min. For valid inputs it is again a valid string, and it is simply the max or min in the order
above. For example, max(0M10, 0010) = 0M10, and max(0M10, 0110) = 0110.

**Gate model.** A metastable signal is modelled as a third value, M. A 2-input AND with one input at
a stable 0 outputs 0, whatever the other input does. A 2-input OR with one input at a stable 1
outputs 1. In every other case a gate with an M input outputs M, and an inverter turns M into M.
Standard AND2, OR2 and INV cells behave this way. Complex cells (AOI, OAI, MUX) are not assumed
to. Whether a circuit contains metastability therefore depends on its *gate structure*, not only on
its Boolean function. Two netlists that compute the same function on 0 and 1 can behave
differently when an input is M. This is the main point to keep in mind when reading or changing
the RTL.

## 2. The comparison automaton

Scan g and h together from the most significant bit. A four-state automaton decides the
comparison:

| state | meaning                                     |
|-------|---------------------------------------------|
| 00    | prefixes equal so far, their parity is even |
| 11    | prefixes equal so far, their parity is odd  |
| 10    | g > h (absorbing)                           |
| 01    | g < h (absorbing)                           |

From state 00, an input pair g_i h_i becomes the next state as it is. From 11, the inverted pair
becomes the next state, because an odd parity prefix means the rest of a Gray code counts
downwards. The states 10 and 01 never change again. Written as an operator s' = s ◇ (g_i h_i):

| ◇  | 00 | 01 | 11 | 10 |
|----|----|----|----|----|
| 00 | 00 | 01 | 11 | 10 |
| 01 | 01 | 01 | 01 | 01 |
| 11 | 11 | 10 | 00 | 01 |
| 10 | 10 | 10 | 10 | 10 |

Bit i of the outputs depends only on the state s(i-1) reached *before* that bit:

| s(i-1) | max bit i  | min bit i  |
|--------|------------|------------|
| 00     | g_i OR h_i | g_i AND h_i|
| 11     | g_i AND h_i| g_i OR h_i |
| 10     | g_i        | h_i        |
| 01     | h_i        | g_i        |

The operator ◇ is associative, so a parallel prefix circuit can compute all the states
s(1) ... s(B-1) at once, with O(log B) depth and O(B) operators. That circuit is then followed by
one output cell per bit.

Associativity is not obvious once M bits appear. The three-valued version of ◇ is *not*
associative in general. It does behave associatively, though, on every operand sequence that
comes from a pair of valid strings. That is what lets the prefix tree evaluate it in any bracketing.
The testbench `tb_mc_ppc` checks this property on the gate netlist.

## 3. One cell for everything: the selection circuit

`mc_select` is five gates in three levels:

    f = (b AND (sel2 OR a)) OR (a AND NOT sel1)

With sel1 = sel2 = s it is a multiplexer, `s ? b : a`. It also contains the consensus term a·b, so
its output stays stable when a = b even if s is metastable. Both operators of the 2-sort are pairs
of selection circuits, so each costs 4 AND, 4 OR and 2 inverters.

**Prefix operator (`mc_diamond`).** The state travels in "N form" (NOT s1, s2): its first bit is
inverted, which saves inverters. The prefix inputs are (NOT g_i, h_i). With s as the left operand
and b as the right operand, both in N form:

| output bit                | sel1 | sel2 | a  | b  |
|---------------------------|------|------|----|----|
| first (inverted) bit      | b[1] | b[1] | s2 | s[1] = NOT s1 |
| second bit                | b[0] | b[0] | s2 | s[1] = NOT s1 |

**Output operator (`mc_out`).** Its inputs are the N-form state ns = (NOT s1, s2) and the bits g, h:

| output | sel1   | sel2   | a | b |
|--------|--------|--------|---|---|
| max    | s2     | NOT s1 | g | h |
| min    | NOT s1 | s2     | h | g |

These connections implement max = (NOT s1 + g)·h + NOT s2·g and min = s1·h + (s2 + h)·g. The
published connection table lists sel1 and sel2 the other way round for these two rows. With the
selection circuit as drawn, that version would swap max and min in states 00 and 11. The
published formulas and state tables agree with the connections above, so this design follows them.

Not every gate netlist of these functions contains metastability. The testbenches check both
operators against the closure of their tables for all 81 three-valued input combinations. If you
re-derive a cell, run those testbenches again.

## 4. The prefix circuit (`mc_ppc`)

`mc_ppc #(N)` computes p[i] = d[0] ◇ d[1] ◇ ... ◇ d[i] using the recursive Ladner–Fischer
scheme. Each level of the recursion works on half as many elements (rounded up) as the one
before it:

1. Combine neighbours: t[k] = d[2k] ◇ d[2k+1]. For odd N, d[N-1] passes straight to the last t.
2. Solve the half-size problem PPC(⌈N/2⌉) on t, giving q.
3. Set p[0] = d[0] and p[2k+1] = q[k]. Set p[2k] = q[k-1] ◇ d[2k], except that for odd N the last
   output is q[⌈N/2⌉-1].

The operand order matters because ◇ is not commutative: the earlier prefix is always the left
operand. For N a power of two the circuit has 2·log2 N − 1 operator levels and 2N − log2 N − 2
operators. N = 15, as used by a 16-bit 2-sort, takes 24 operators (240 gates).

The module does not instantiate itself. It unrolls the recursion into two generate loops over the
levels. `g_up` forms the paired inputs t of every level. `g_dn` then works back from the smallest
level and forms the prefixes q of each level from those of the level above it. The netlist is the
same one the recursive description gives.

## 5. The 2-sort (`mc_2sort`)

```
   bits 0..B-2:  (NOT g_k, h_k) --> mc_ppc(B-1) --> state after bits 0..k
   bit 0:        max = g_0 OR h_0, min = g_0 AND h_0    (initial state 00)
   bit k >= 1:   mc_out(state after bits 0..k-1, g_k, h_k)
```

Positions count from the most significant bit (position k is vector bit B-1-k). The last bit never
enters the prefix circuit, because no output needs the state after it. The netlist has
(B−1) + 2 + 10(B−1) + 10·ops(B−1) gates: 13, 55, 169 and 407 for B = 2, 4, 8 and 16. These equal
the published gate counts, and an elaboration of the RTL with its hierarchy kept gives the same
instance counts. The depth is O(log B).

## 6. Sorting networks (`mc_sortnet`, the top)

A sorting network is a fixed pattern of compare-exchange elements. Replacing every element by a
2-sort gives a metastability-containing sorter for valid strings. The output of each 2-sort is
again valid and correctly ordered, so the whole network sorts correctly in the order of
section 1. `NET` selects one of four networks:

| `NET`              | channels | comparators | depth | gates at B = 16 |
|--------------------|----------|-------------|-------|-----------------|
| `NET_SORT4`        | 4        | 5           | 3     | 2035            |
| `NET_SORT7`        | 7        | 16          | 6     | 6512            |
| `NET_SORT10_SIZE`  | 10       | 29          | 8     | 11803           |
| `NET_SORT10_DEPTH` | 10       | 31          | 7     | 12617 (default) |

The comparator layouts in `mc_pkg` are standard networks of these sizes, each checked with the
0-1 principle. Their comparator counts reproduce the published gate counts for all four networks
at B = 2, 4, 8 and 16, and `tb_mc_sortnet` checks those 16 numbers. The comparator *placement* may
differ from the networks used in the publication. After sorting, channel 0 holds the minimum and
channel N-1 the maximum.

Ports: `x[c]` and `y[c]` are the channels, each `B` bits of `RAILS` rails. The module is purely
combinational, so an output follows its input after the gate delays. The published pre-layout
delay of the default configuration in a 45 nm library is about 3.8 ns.

## 7. Evaluating the netlist on metastable inputs: `RAILS`

Every module has a parameter `RAILS` (default 1). With `RAILS = 1` each wire is one bit: this is
the circuit you would build. With `RAILS = 2` the *same gate netlist* is elaborated with two bits
per wire, {hi, lo}, where 0 = 00, 1 = 11 and M = 10. In this encoding AND and OR act bitwise on
both rails, and an inverter inverts and swaps the rails. This reproduces the three-valued gate
model exactly. A two-state simulator such as Verilator can then show what the real gates do when
an input is metastable. The testbenches use this to compare the netlist with the closure
specification. `RAILS = 2` is synthesizable, but it is a verification view, not a proposed
dual-rail implementation.

## 8. Synthesis caveat

Containment holds only if the netlist stays made of the AND2, OR2 and INV cells it is written
with. Every gate is a separate instance of `mc_and2`, `mc_or2` or `mc_inv`, so it can be mapped
by hand or protected (dont_touch or keep) in your flow. Let logic optimisation restructure the
design and you get a correct binary sorter that may no longer contain metastability. A generic
yosys run, for example, merges and remaps gates, and reports fewer cells than the 407 above for
one 2-sort.

## 9. Verification

Each testbench is self-checking and prints `TB_RESULT checks=N failures=M`.

| testbench            | what it checks |
|----------------------|----------------|
| `tb_mc_and2/or2/inv` | the cells on all binary inputs, and the dual-rail cells on all 9 (or 3) three-valued inputs against the gate tables |
| `tb_mc_select`       | all 16 binary and 81 three-valued inputs; masking of a metastable select |
| `tb_mc_diamond`      | the prefix operator against the state table, and against its closure on all 81 three-valued inputs |
| `tb_mc_out`          | the output operator in the same way |
| `tb_mc_ppc`          | PPC(N) for N = 1..8 and 15 against a sequential fold; dual-rail PPC(15) fed from random 16-bit valid strings against the closure of every prefix state |
| `tb_mc_2sort`        | all pairs of valid strings for B = 1, 2, 3, 4, 5, 8 (261 121 pairs at B = 8); 200 000 random metastable pairs and 100 000 stable pairs at B = 16; every bit against the closure of max and min |
| `tb_mc_sortnet`      | all four networks at B = 16 (dual rail), 20 000 vectors of valid strings each, against a reference sort of ranks; counts metastable inputs, equal inputs, equal metastable inputs, neighbouring ranks and metastable outputs, and fails if one never occurs; the published gate counts |
| `tb_mc_sortnet_full` | the default top (10 channels, 16 bits, single rail), 20 000 vectors of stable codes with forced ties and adjacent values |

The two 2-sort references are written independently of the netlist. The one in `tb_mc_2sort`
enumerates resolutions, and the one in `tb_mc_sortnet` sorts ranks. Each testbench was also run
against a deliberately broken copy of its module and failed. The broken copies included the
swapped output-cell connections discussed in section 3.

To run one testbench with Verilator:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb rtl/mc_pkg.sv tb/mc_tb_pkg.sv \
          tb/tb_mc_2sort.sv --top-module tb_mc_2sort
./obj_dir/Vtb_mc_2sort
```

Every testbench finishes in a few seconds.

## 10. Departures and own choices

* The output-cell connections follow the published formulas, not the connection table; see
  section 3.
* In the published 2-sort figure, the prefix inputs appear to be numbered from 1 and the output
  cells from 0. Here the output cell of bit k receives the state after bits 0..k-1, as the
  correctness argument requires.
* The base-case inverter saving mentioned in the publication is not applied. Every operator keeps
  both inverters, which is what the published gate counts correspond to.
* The sorting-network comparator layouts, the sort direction, the bit order in vectors, the N form
  at the ports of `mc_ppc`, and the `RAILS` verification view are choices made here.
* Not modelled: timing, area, the cell library and the physical design. The published delay and
  area figures come from 45 nm synthesis and place and route and cannot be checked here.

## Files

`rtl/mc_pkg.sv` holds the shared types, the network tables and the gate-count functions.
`rtl/mc_and2.sv`, `mc_or2.sv` and `mc_inv.sv` are the cells, and `mc_select.sv` the selection
circuit. `mc_diamond.sv` and `mc_out.sv` are the two operators, and `mc_ppc.sv` the prefix circuit.
`mc_2sort.sv` is the 2-sort and `mc_sortnet.sv` the sorting network (top). Under `tb/`,
`mc_tb_pkg.sv` holds the reference models and `mc_2sort_bench.sv` a harness for one 2-sort
configuration, next to the testbenches listed above.
