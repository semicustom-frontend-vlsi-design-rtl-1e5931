# A 32-bit Brent-Kung adder in SystemVerilog

Adding two 32-bit numbers is slow only because of the carries. The carry
into bit *i* depends on every bit below it. A ripple-carry adder resolves
the carries one bit after another, so its delay grows linearly with the
width. A parallel-prefix adder treats the carries as a prefix problem. Each
bit first says whether it *generates* a carry (both operand bits set) or
*propagates* one (exactly one operand bit set). A tree of small cells then
merges neighbouring groups of bits until every bit knows the generate of
the whole range below it. That range generate is its carry.

The Brent-Kung network is the cheapest way to build this tree with
logarithmic depth. It first reduces pairs, fours, eights and so on up to
the full width (the up-sweep). It then sends the finished prefixes back
down to the bits that are still missing theirs (the down-sweep). It needs
few cells and little wiring, and each cell drives at most two others. The
price is about twice the depth of the fastest prefix networks.

This RTL implements the 32-bit Brent-Kung adder of *Semicustom Frontend
VLSI Design and Analysis of a 32-bit Brent-Kung Adder in Cadence Suite*
(Y. Singh). It follows that design's split into cell modules, its module
and port names, and the cell placement of its 32-bit schematic. The width
is a parameter, `WIDTH`, with 32 as its default.

## Function and interface

`brent_kung_adder` computes `{Co, S} = A + B + Ci`.

| port | dir | width | meaning |
|------|-----|-------|---------|
| `A`  | in  | WIDTH | operand |
| `B`  | in  | WIDTH | operand |
| `Ci` | in  | 1     | carry-in |
| `S`  | out | WIDTH | sum, modulo 2**WIDTH |
| `Co` | out | 1     | carry-out (unsigned overflow) |

The adder is purely combinational. It has no clock, no reset and no
registers, so the result is valid one propagation delay after the
inputs change. To pipeline it, put registers around it.

## The three stages

1. **Pre-processing** (`preprocessing`, one per bit): `g = a & b`, `p = a ^ b`.
2. **Carry generation** (`bk_prefix_tree`): the Brent-Kung network, built
   from black and gray cells. It returns `c[i]`, the carry into bit *i*,
   for i = 0..WIDTH. `c[0]` is `Ci` and `c[WIDTH]` is `Co`.
3. **Post-processing** (`postprocessing`, one per bit): `s = p ^ c`.

The two prefix cells apply the same operator. A group *i:j* generates a
carry if its upper part generates one, or if its upper part propagates a
carry that its lower part generates. It propagates a carry only if both
parts do.

* **Black cell** (`blackcell`): `g_ij = g_ik | p_ik & g_kj` and
  `p_ij = p_ik & p_kj`. It is used where the merged group will be merged
  again, so its propagate is still needed.
* **Gray cell** (`graycell`): `c = g_i | p_i & g_im1`, the generate half
  only. It is used where the lower group already reaches the carry-in. The
  result is then a final carry and no propagate is needed.

## The carry network in detail

This is the part that takes some care.

**Columns.** The network has WIDTH+1 columns. Column 0 holds the carry-in
as its generate. Column *i*, for i = 1..WIDTH, holds the `g`/`p` of
operand bit *i-1*. The carry-in is thus treated as a bit that generates
a carry exactly when `Ci` is set. The carry into bit *i* is the group
generate of columns *i:0*, and the carry-out is that of columns
*WIDTH:0*. The network has to leave `G[i:0]` in every column.

**Up-sweep**, levels l = 1 .. UP with UP = floor(log2(WIDTH+1)). A column
*i* for which *i+1* is a multiple of 2^l merges its group with the group
of the 2^(l-1) columns just below it. Its group doubles to 2^l columns.
For WIDTH = 32:

| level | groups formed |
|-------|---------------|
| 1 | 31:30, 29:28, ..., 3:2 (black); 1:0 (gray) |
| 2 | 31:28, 27:24, ..., 7:4 (black); 3:0 (gray) |
| 3 | 31:24, 23:16, 15:8 (black); 7:0 (gray) |
| 4 | 31:16 (black); 15:0 (gray) |
| 5 | 31:0 (gray) |

**Down-sweep**, levels l = UP .. 1. Column *i = k·2^l + 2^(l-1) - 1*, with
k ≥ 1, holds a group of 2^(l-1) columns from the up-sweep. It merges that
group with the complete prefix that column *k·2^l - 1* already holds. All
these cells are gray. For WIDTH = 32:

| level | prefixes formed |
|-------|-----------------|
| 5 | none, because 47 > 32 |
| 4 | 23:0 |
| 3 | 27:0, 19:0, 11:0 |
| 2 | 29:0, 25:0, 21:0, 17:0, 13:0, 9:0, 5:0 |
| 1 | every even column: 32:0, 30:0, ..., 2:0 |

**Cost and depth at 32 bits.** There are 26 black cells and 32 gray
cells. Each column from 1 to 32 gets exactly one gray cell, the one that
completes its carry. The longest chain is 8 cells, for example the one
that ends in column 30: 15:0, 23:0, 27:0, 29:0, 30:0. A gray-cell ripple
would chain 32 cells. Generic synthesis of the whole adder gives 116 AND2,
58 OR2 and 64 XOR2 gates. At 4, 8, 16 and 64 bits the network has 5, 12,
27 and 121 cells and a longest chain of 3, 4, 6 and 10 cells.

Where a column is not merged at a level, its value passes to the next
level as a plain wire. The drawn schematic puts buffer ("white") cells
there, and one after each sum XOR. A buffer changes only timing, never
logic, so none is modelled.

## What follows the published design and what is this RTL's own

Follows the publication:
* the cell equations;
* the module names `preprocessing`, `blackcell`, `graycell`,
  `postprocessing` and `brent_kung_adder`;
* the ports `A`, `B`, `Ci`, `S` and `Co`;
* the instance names `preprocessing_stage[i].pp` and
  `postprocessing_stage[i].pp`;
* the carry-in in column 0 and the carry-out taken from column 32;
* every group of the 32-bit schematic, reproduced cell for cell.

Own choices:
* **`WIDTH` parameter.** The placement rules above are a generalisation
  to any width. The publication builds only 32 bits, plus a 4-bit
  gate-level prototype. Widths between 1 and 64 are tested.
* **Separate `bk_prefix_tree` module.** The publication wires its cells
  directly in the top module. Here the network is a module of its own so
  that it can be tested alone.
* **No white-cell module.** See the section above.
* **AOI/OAI rows not modelled.** The schematic labels alternate rows of
  cells AOI and OAI. That is a choice of inverting gates at transistor
  level, with the same logic function.

Differences from the published results:
* **The published critical path looks like a ripple.** The published
  timing report shows the longest path running through the gray cells of
  bits 17, 18, ..., 31 one after another, after the up-sweep. That is a
  gray-cell ripple over the upper half of the word. A true Brent-Kung
  down-sweep would not give such a path. The schematic and the
  description both call for the logarithmic tree, and that is what is
  built here. The published area report also lists a black cell named as
  the last stage. Here the carry-out comes from a gray cell, as in the
  schematic.
* **The published figures do not apply to this RTL.** The publication
  gives 3.78 ns, 1223.91 µm² and 43.32 µW for a 90 nm slow-corner
  library. Those numbers belong to that netlist. The RTL here should be
  shallower on the carry path, and it has not been characterised in any
  technology.
* **The carry-in enters the carry stage.** The block diagram of the
  publication draws Cin going into the pre-processing stage. Here, as in
  its algorithm description, Cin goes into column 0 of the carry network.

## Files

| file | content |
|------|---------|
| `rtl/bk_pkg.sv` | default width `BK_WIDTH = 32`; `bk_up_levels()` |
| `rtl/preprocessing.sv` | generate/propagate cell |
| `rtl/blackcell.sv` | black prefix cell |
| `rtl/graycell.sv` | gray prefix cell |
| `rtl/postprocessing.sv` | sum cell |
| `rtl/bk_prefix_tree.sv` | the Brent-Kung carry network, built with generate loops |
| `rtl/brent_kung_adder.sv` | top level |
| `tb/tb_*.sv` | self-checking testbenches and their helpers |

## Verification

Every testbench checks results against values it works out itself,
either from the cell definitions or from the simulator's own `+`. Each
one prints `TB_RESULT checks=N failures=M`.

* `tb_preprocessing`, `tb_blackcell`, `tb_graycell`, `tb_postprocessing`:
  exhaustive truth tables.
* `tb_bk_prefix_tree`: compares every carry with a bit-serial reference.
  The 32-bit network gets directed vectors, including a carry-in running
  through every column, and 30,000 random vectors. The 1-, 2-, 3-, 4- and
  5-bit networks are checked exhaustively. The 7-, 16- and 33-bit
  networks are checked with random vectors.
* `tb_brent_kung_adder`: the 32-bit adder at default parameters. It first
  replays the seven published test vectors at their published times and
  checks the published sums and carry-outs:

  | time (ns) | A + B + Ci | S | Co |
  |-----------|------------|---|----|
  | 0   | 0 + 0 + 0 | 0 | 0 |
  | 10  | 1 + 1 + 0 | 2 | 0 |
  | 30  | 4294967295 + 1 + 0 | 0 | 1 |
  | 50  | 2147483648 + 2147483648 + 0 | 0 | 1 |
  | 70  | 0 + 0 + 0 | 0 | 0 |
  | 90  | 10 + 20 + 0 | 30 | 0 |
  | 110 | 15 + 1 + 1 | 17 | 0 |

  It then runs corner cases (all-ones chains, a generate at every bit
  position) and 100,000 random additions. It counts carry-outs, carry-ins
  that change the result, full-length carry chains and zero additions,
  and fails if any of them never occurred.
* `tb_bka_widths`: the 4- and 8-bit adders exhaustively; the 13-, 16- and
  64-bit adders with random operands.

All pass. Each testbench was also run against a copy of its module with
one deliberate bug, and it caught the bug. The bugs were an OR in place
of an XOR, a dropped propagate term, a down-sweep cell reading the wrong
column, and the carry-out taken from the wrong bit.

The 32-bit adder has been checked by simulation only, not by a formal
equivalence proof. The small widths, which are checked exhaustively, use
the same generate rules.

## Simulating

With Verilator 5, from the project root:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
    rtl/bk_pkg.sv tb/tb_brent_kung_adder.sv --top-module tb_brent_kung_adder
./obj_dir/Vtb_brent_kung_adder
```

For any other testbench, replace the testbench file and the top-module
name. `-y rtl -y tb` lets Verilator find each module in the file of the
same name. To use another width, instantiate
`brent_kung_adder #(.WIDTH(n))`. Nothing else changes.
