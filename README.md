# Quaternary serial and parallel adders

This RTL adds numbers written in base 4. Each base-4 digit, or **qudit**, is one of 0, 1, 2, 3. The
adders are built from a small set of quaternary logic gates. On the wires a qudit is its 2-bit binary
code, but the design is never written as a binary adder. Every gate is a quaternary operator,
instantiated as a cell, and the carry logic is expressed in quaternary propagate and generate terms.
This keeps the netlist a faithful model of a quaternary circuit. Gate counts and logic depth can be
read off it and compared with the analytical figures the design comes from.

The design has three layers:

1. a **quaternary gate library**: bit-wise basic gates plus three "special" unary operators;
2. **one-qudit cells**: a half adder, a full adder and a propagate/generate cell;
3. **carry structures** that turn the per-qudit terms into carries:
   - a ripple chain;
   - a single-stage carry look-ahead;
   - a logarithmic carry tree with its companion product tree;
   - a sparse (every-fourth-carry) version of that tree;
   - a block-ripple arrangement of small parallel adders.

The top, `quat_adder_top`, holds the two organisations proposed for large adders side by side. These
are the sparsity-4 adder and the block-ripple (hybrid) adder. Both receive the same operands.

---

## 1. Qudits and the operator set (`quat_pkg`, `quat_gate`)

A qudit is carried on two wires as its binary code: 0 = `00`, 1 = `01`, 2 = `10`, 3 = `11`
(`quat_pkg::qudit_t`). The values 0 and 3 are *symmetric*: swapping their two bits leaves them
unchanged. The values 1 and 2 are *asymmetric*.

**Basic operators** act bit by bit on the code, just like Boolean gates on a 2-bit word:

| a | b | AND | OR | XOR | NAND | NOR | XNOR |
|---|---|-----|----|-----|------|-----|------|
| 1 | 2 | 0 | 3 | 3 | 3 | 0 | 0 |
| 1 | 3 | 1 | 3 | 2 | 2 | 0 | 1 |
| 2 | 3 | 2 | 3 | 1 | 1 | 0 | 2 |

(The table shows three sample rows. `tb_quat_gate` holds all ten unordered pairs.) The basic
inverter gives 3 − a.

**Special unary operators**:

| input              | 0 | 1 | 2 | 3 | rule |
|--------------------|---|---|---|---|------|
| inward (half) inverter  | 2 | 2 | 1 | 1 | invert, then move 0/3 to the nearest of 1/2 |
| outward (full) inverter | 3 | 3 | 0 | 0 | invert, then move 1/2 to the nearest of 0/3 |
| bitswap            | 0 | 2 | 1 | 3 | swap the two bits |
| equality (a, b)    | 3 if a = b, else 0 | | | | |

**Compound gates** apply a special operator after a basic gate. For example, inward NAND is
inward(a·b) and bitswap XOR is bitswap(a ⊕ b). `quat_gate` is one cell with an operator parameter
`OP` (`quat_pkg::op_e`, 20 operators) and an input count `NIN`. Every gate drawn in the adder
schematics is one instance of it, so the instance count of an adder is its gate count.

Three facts about these operators carry the whole adder design:

- `bitswap(x · 1)` moves bit 0 of x into bit 1. This is how a carry from the low bit of the 2-bit
  code reaches the high bit.
- `x · 1` keeps only bit 0. Every carry is masked this way, so it is always 0 or 1.
- `x · bitswap(x)` is 3 when x = 3 and 0 otherwise. This is a "this qudit is 3" detector.

## 2. Adding qudits: the half adder and the full adder

Within one qudit the 2-bit code behaves like a tiny binary adder. XOR gives the sum except for the
internal carry out of bit 0, which the bitswap term puts back into bit 1.

**Half adder** (`quat_half_adder`, 9 gates):

    s = a ⊕ b ⊕ bitswap(a·b·1)
    c = ( inward(a·b) + a·b·bitswap(a ⊕ b) ) · 1

- `inward(a·b)` has bit 0 set exactly when both high bits are 1.
- `a·b·bitswap(a⊕b)` has bit 0 set when both low bits are 1 and exactly one high bit is.

The OR of the two, masked with 1, is the carry into the next qudit.

**Full adder** (`quat_full_adder`, 11 gates). All three inputs are taken at once. Two cascaded half
adders would need 19 gates and 9 gate delays; this needs 5.

    t    = a·b + b·cin + cin·a                  (bit-wise majority)
    s    = a ⊕ b ⊕ cin ⊕ bitswap(t · 1)
    cout = ( inward_nand(a, b) + t · bitswap_xor(a, b) ) · 1

Bit 0 of t is the carry from bit 0 into bit 1 of the code.

*Which reading of the sum equation is built.* The printed sum equation can be read as
`bitswap(t)·1` or as `bitswap(t·1)`. The gate diagram shows the second. Only the second adds
correctly: for example 1 + 1 + 1 must give 3, but the first reading gives 1. The RTL builds
`bitswap(t·1)`. The published full-adder truth table also has one wrong row: 0 + 3 + 1 is listed
as sum 1, but it is sum 0, carry 1. The testbenches check plain integer arithmetic, not that table.

## 3. Propagate and generate (`quat_pg`)

For position i:

    P*_i = a_i ⊕ b_i
    P_i  = P*_i · bitswap(P*_i)     = 3 when a_i + b_i = 3, else 0
    G_i  = half-adder carry (a_i, b_i) = 1 when a_i + b_i ≥ 4, else 0

A carry entering position i leaves it exactly when a_i + b_i = 3, which is why P is a "sum is 3"
detector. Because P is 0 or 3 and every carry is 0 or 1, the term `P · C` is simply C or 0. So the
carry recurrence

    C_i = G_i + P_i · C_(i-1)

works with the ordinary gates and never leaves {0, 1}. The cell takes G from a half-adder instance,
since the generate is defined as the half adder's carry. The half-adder sum output is unused there.

## 4. Carry structures

In all adders the operands `a`, `b` and the sum `s` are packed arrays `qudit_t [N:1]`, with qudit 1
least significant. Read as a plain 2N-bit vector, that is the binary value of the base-4 number.
`cin` and `cout` are qudits holding 0 or 1. Every adder computes `{cout, s} = a + b + cin`. The
parallel adders form their sums with full-adder cells fed by the computed carries. Those cells' own
carry-outs are left unconnected, and synthesis removes them.

Delays below are in gate delays, all gates counted as equal. They are the analytical figures of the
source. The RTL is purely combinational and has no clock. In simulation every gate has a delay of
one time unit (`#1` in `quat_gate`; synthesis ignores it). The testbenches therefore measure how
many gate delays an output takes to settle and compare that with the analytical figure.

### 4.1 Ripple carry (`quat_ripple_adder`)

This is a chain of full adders, 5 gate delays per qudit. It is used only as the optional group adder
inside the sparse adder. Simulation confirms it: a carry-in that travels the whole word reaches
`cout` after exactly 5N gate delays.

### 4.2 Single-stage carry look-ahead (`quat_cla_adder`, default N = 3)

Each carry is the fully expanded recurrence:

    C_i = ( G_i + Σ_{k<i} G_k·P_(k+1)···P_i + C_0·P_1···P_i ) · 1

The generate and propagate of position k are not built as separate cells. Their half-adder
sub-terms go straight into the product terms, as in the 3-qudit schematic:

- G_k = (inward(A_k·B_k) + A_k·B_k·bitswap(P*_k))·1 contributes two terms,
  inward(A_k·B_k)·P_(k+1)···P_i and A_k·B_k·bitswap(P*_k)·P_(k+1)···P_i;
- the carry-in contributes one term, C_0·P_1···P_i.

So carry C_i has 2i+1 product terms, a (2i+1)-input OR and a final AND with 1. It needs 2i+7 gates
and i²+5i+11 gate inputs, counting the per-qudit A·B, P*, bitswap(P*), inward and P gates. The depth
is 6 gate delays for any N, and simulation measures exactly 6 for every size tested. The cost is
fan-in, which grows as 2N+1, and gate count, which grows as N² + 8N. This is why the adder is meant
for small N or as the block inside larger adders.

### 4.3 Logarithmic carry tree (`quat_carry_tree`, `quat_product_tree`, `quat_log_adder`, default N = 7)

This is the part that takes the most care to read. Define the tree node Q(i, j), for i ≥ j, as the
carry produced by the run of positions j−1 … i−1. Position 0 is the carry-in, so:

    Q(1,1) = cin,   Q(i,i) = G_(i−1)
    Q(i,j) = Q(i, i−m+1) + Q(i−m, j) · P(i−m, i−1),    m = 2^floor(log2(i−j))

**How a node splits.** The run is cut into two parts:

- the upper m positions, i−m … i−1, which give the node Q(i, i−m+1);
- the rest, whose carry must pass through the upper part. It is therefore ANDed with the group
  propagate P(i−m, i−1) of the upper part.

Each internal node is one AND and one OR. Q(i, 1) is the carry *into* qudit i, that is C_(i−1).
Every split removes the leading 1 bit of i−j, so a node reaches its leaves in at most
floor(log2(i−j)) + 1 steps. Fan-in never exceeds 3.

**Depth.** The source gives 4 + 2·ceil(log2 N) gate delays: 4 for the propagate/generate stage and 2
per tree level. Two things change that figure when every gate, bitswap included, counts as one delay:

- G is the half-adder carry, which is 5 gates deep (A·B, bitswap(A⊕B), AND, OR, AND with 1).
- The root Q(N+1, 1) spans N positions and needs floor(log2 N) + 1 levels, one more than
  ceil(log2 N) when N is a power of two.

The log-adder testbench therefore checks the bound 5 + 2·(floor(log2 N) + 1) on the carry-out.
Measured carry-out settling times: 10 at N = 7, which matches the source's 4 + 2·3; 12 at N = 8;
13 at N = 16, against the source's 12. The carry tree alone settles within 2·(floor(log2 N) + 1).

**Product tree.** The group propagates come from `quat_product_tree`:

    P(i,j) = P(i, j−m) · P(j−m+1, j),   m = 2^floor(log2(j−i))

Level k of `pl` holds every run of length 2^k: `pl[k][i] = P(i, i+2^k−1)`. The carry tree only ever
asks for runs whose length is a power of two, because m is one. The product tree is evaluated
alongside the carry tree and adds no delay.

**The generated node set.** It is not hand-drawn. `quat_carry_tree` computes it at elaboration: it
starts from the wanted outputs Q(k·SPARSITY, 1) and walks the recursion down to the leaves. The
resulting gate counts match the closed forms of the source exactly:

| N | carry-tree gates, 2(sN+s+N) − 2^(s+2) + 4 | product-tree gates, s(N+1) − 2^(s+1) + 2 |
|---|---|---|
| 7 | 34 | 10 |
| 8 | 42 | 13 |
| 16 | 108 | 38 |
| 25 | 198 | 74 |

In both formulas s = floor(log2 N).

`quat_log_adder` chains three stages: the propagate/generate cells, both trees with SPARSITY = 1
(every carry C_0 … C_N), and the sum cells.

### 4.4 Sparsity-4 adder (`quat_sparse4_adder`, default N = 8)

The same carry tree with SPARSITY = 4 produces only C_3, C_7, C_11, …, and only the nodes those
carries need are built. For N = 8 that is 14 gates instead of 42. Each of these carries is the
carry-in of a small group adder, which fills in the carries between them and forms the sums:

| group | qudits | carry-in | computes |
|---|---|---|---|
| 0 | 1 … 3 | cin | C_1, C_2 |
| k ≥ 1 | 4k … 4k+3 (cut at N) | C_(4k−1) from the tree | C_4k, C_4k+1, C_4k+2 |

The carry-out is the tree's C_N when N+1 is a multiple of 4, and otherwise the last group's. The
group adder is the single-stage look-ahead by default (`GROUP_KIND = BLK_CLA`). A ripple chain can
be chosen instead (`BLK_RIPPLE`). N = 8 is the smallest size whose sparse tree yields both C_3 and
C_7.

### 4.5 Block-ripple hybrid (`quat_hybrid_adder`, default N = 8, BLOCK = 4)

The word is cut into blocks of `BLOCK` qudits; the last block takes what is left. Each block is a
parallel adder: the logarithmic adder by default (`BLOCK_KIND = BLK_LOG`), or the single-stage one
(`BLK_CLA`). The carry ripples from block to block. The delay then grows with the number of blocks,
while each parallel adder stays small.

### 4.6 The top (`quat_adder_top`, N = 8, BLOCK = 4)

| port | dir | width | meaning |
|---|---|---|---|
| `a`, `b` | in | 8 qudits (16 bits) | operands |
| `cin` | in | 1 qudit | carry-in, 0 or 1 |
| `sum_sparse`, `cout_sparse` | out | 8 qudits, 1 qudit | result of the sparsity-4 adder (single-stage groups) |
| `sum_hybrid`, `cout_hybrid` | out | 8 qudits, 1 qudit | result of the block-ripple adder (carry-tree blocks) |

Between them, the two halves use every cell of the library. Both outputs must always agree.

## 5. Where this RTL departs from, or goes beyond, the source

The two large-adder schemes have no circuit drawings available. What follows was built from their
prose descriptions.

- **Sparse tree structure.** The sparse tree is the ordinary carry-tree recursion, pruned to the
  wanted carries. The group boundaries and the carry-out rule are this design's reading of "every
  (4k−1)-th carry feeds … adders that generate the carries at 4k, 4k+1, 4k+2".
- **Block-ripple sizes.** The block width (4) and the block adder kind are choices, as is the
  default width of 8 qudits.
- **Propagate/generate cells.** The log and sparse adders form G and P in `quat_pg` cells, which
  contain a full half adder for G. The half adder's sum gates are unused and are removed by
  synthesis. The single-stage adder does not use these cells (see 4.2).
- **Duplicated cells.** The group adders of the sparse adder have their own propagate/generate
  cells, duplicating those that feed the tree. A synthesis tool can share them; as written, the
  netlist does not.
- **The top.** No single configuration is named as *the* design, so the top holds both proposed
  large adders.
- **Carry-in range.** A carry-in of 2 or 3 is outside the design's contract, and the results are
  then undefined. No assertion guards it.
- **Timing is unit-delay only.** The delays measured in simulation count gates. They say nothing
  about the electrical delay of a real quaternary gate, which differs from one operator to another.

## 6. Verification

Each testbench in `tb/` is self-checking and ends with a line `TB_RESULT checks=N failures=M`. The
adder references are integer arithmetic on the operands read as 2N-bit numbers. They are
independent of the quaternary equations.

| testbench | what it covers |
|---|---|
| `tb_quat_gate` | all 20 operators × all input pairs, against the operator table and transfer curves; 3-input AND/OR/XOR |
| `tb_quat_half_adder`, `tb_quat_full_adder`, `tb_quat_pg` | exhaustive; the full adder's carry-out must settle in 5 gate delays |
| `tb_quat_product_tree` | N = 7, 12; every node, random and all-3/all-0 propagates |
| `tb_quat_carry_tree` | full trees (N = 7, 16) and sparse trees (N = 8, 25) against the serial recurrence; settling-time bound |
| `tb_quat_cla_adder`, `tb_quat_ripple_adder`, `tb_quat_log_adder` | several sizes each, random and long-propagate operands; settling time 6, 5N and the log bound |
| `tb_quat_sparse4_adder` | N = 3 … 25, both group kinds |
| `tb_quat_hybrid_adder` | several N/BLOCK pairs, both block kinds, ragged last block |
| `tb_quat_adder_top` | the top at its defaults, 20 000 vectors (see below) |

For the top, `tb_quat_adder_top` also counts how often each carry mechanism fired, and any
mechanism that never fires is counted as a failure:

- tree carry C_3 = 1;
- tree carry C_7 = 1;
- a carry produced inside a group;
- a carry leaving hybrid block 1;
- a carry crossing a whole block;
- a carry-in travelling the whole word;
- a carry-out of 1.

Operands are biased so that long propagate runs are frequent.

Simulate with Verilator 5 from the directory that holds `rtl/` and `tb/`, for example:

    verilator --binary --timing -Irtl -y rtl -y tb rtl/quat_pkg.sv tb/tb_quat_adder_top.sv \
        --top-module tb_quat_adder_top -Mdir obj_top && obj_top/Vtb_quat_adder_top

Replace the testbench name to run another. The unit gate delays make the larger testbenches slow to
compile: `tb_quat_sparse4_adder` takes about four minutes, and
`tb_quat_hybrid_adder` and `tb_quat_log_adder` one to two minutes. The others build in seconds.

## 7. Changing the design

- **Width.** Set `N` on any adder or on the top. The sparse adder needs N ≥ 3.
- **Other sparsity.** `quat_carry_tree` accepts any `SPARSITY`. Only `quat_sparse4_adder` fixes
  it at 4, because its grouping is written for 4.
- **Group and block adders.** Select them with `GROUP_KIND` and `BLOCK_KIND`, using the
  `quat_pkg::blk_e` values.
- **New gates.** To add an operator, extend `op_e` and the case in `quat_gate`. Every structural
  module names its gates explicitly, so a change in one cell shows up directly in the gate count.
