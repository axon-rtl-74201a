# A hybrid parallel-prefix / Ling adder

An adder's delay comes from its carries: bit *i* of the sum needs the carry
that comes in from all the bits below it. A parallel-prefix adder computes
every carry at once, in a tree of depth about log2(n). It does this by
repeatedly merging (generate, propagate) pairs of neighbouring bit ranges.
The Ling formulation carries a slightly different signal through the tree:
the *pseudo-carry* H. H has one fewer term than the real carry, so its first
levels map to simpler gates. For example, the two-bit pseudo-carry
H[1:0] = a1·b1 + a0·b0 is a single AOI22, while the two-bit carry G[1:0]
needs an XOR or OR first.

This RTL builds a *hybrid* tree. A coarse delay estimate finds the critical
path of an ordinary prefix tree. The nodes on that path become Ling nodes,
and every other node stays a standard prefix node. Where the two kinds meet,
*conversion nodes* change one signal into the other. The propagate terms
needed by this mix are built only where some node uses them. Every node is
written as the single inverting cell (AOI/OAI, NAND/NOR) it maps to, and
signal polarity alternates from level to level. Inverters appear only where
an edge joins two signals of the same polarity.

The architecture follows the AXON adder-optimisation framework (T. Yang,
X. Ren, Q. Wan, Q. Meng, *AXON: An Automated Netlist Optimization Framework
for High-Speed Adders*). That framework also searches prefix topologies,
enumerates inverter placements, sizes gates and runs place-and-route. Those
steps are tools, not circuits, and are not part of this RTL. The
[departures](#where-this-rtl-departs-from-axon) section says what this RTL
decides for itself.

## Signals and the four kinds of node

For operands a and b, bit i has three signals:

| signal | definition | used by |
|---|---|---|
| g_i | a_i & b_i | every node |
| p_i | a_i ^ b_i | the sum bits, and the group propagates of plain standard nodes |
| t_i | a_i \| b_i | Ling and conversion nodes, and their group propagates |

For a bit range [i:j], with i ≥ j:

* G[i:j] is the group generate, the carry out of the range when no carry
  comes in.
* H[i:j] = g_i | G[i-1:j] is the Ling pseudo-carry. For a single bit,
  H[i:i] = g_i.
* P[a:b] = t_a & … & t_b is the group propagate. It equals 1 when a < b.
  Built from p instead of t it is the XOR group propagate.

Two identities connect these signals. First, G[i:j] = t_i & H[i:j]. Second,
since t·g = g, an OR propagate works wherever an XOR propagate does, but not
the other way round: a Ling node needs t, because its propagate range stands
in for the t_{k-1} that turns H[k-1:j] into G[k-1:j]. By default
(`XOR_P = 1`) the tree therefore has two propagate networks: plain standard
nodes, whose inputs are both G, take their ranges from p, and every other
node takes them from t. With `XOR_P = 0` one network, built from t, serves
all nodes; the adder is just as correct and saves the second network (20
NAND/NOR gates at 32 bits).

A node merges an upper range [i:k], held in its own column, with the lower
range [k-1:j], held by column k-1. Every node kind is one AND-OR. The kinds
differ only in the propagate range they take:

| node kind | upper in | lower in | propagate | out |
|---|---|---|---|---|
| standard | G[i:k] | G[k-1:j] | P[i:k] | G[i:j] |
| Ling | H[i:k] | H[k-1:j] | P[i-1:k-1] | H[i:j] |
| Ling → standard | G[i:k] | H[k-1:j] | P[i:k-1] | G[i:j] |
| standard → Ling | H[i:k] | G[k-1:j] | P[i-1:k] | H[i:j] |

A standard node may also take an H value from above. It then uses t_i & H[i:k]
as its upper term, and the cell becomes an AOI22/OAI22. A Ling node cannot take
a G value from above, because H cannot be rebuilt from G. So a Ling node
always has a Ling node, or a bare bit, above it.

**Watch the propagate ranges.** The paper's general Ling recursion prints the
range as P[i-1:k], and its Ling-to-standard conversion prints it as P[i:k].
Both fall one bit short. Suppose t_{k-1} = 0. Then bit k-1 stops any carry,
so H[k-1:j] must not reach bit i. The shorter range lets it through anyway.
The bit-by-bit expansion of H that the paper gives just before the recursion
does need P[i-1:k-1], and that is what this RTL uses. A broken copy of the
tree that uses the printed range gives wrong carries for tens of thousands of
random operands. The standard → Ling form is correct as printed.

## How the tree is built

Everything structural is computed by constant functions in `axon_pkg`, when
the design is elaborated. Nothing is stored in a table file.

**Topology.** `LEVELS` is the depth in logic levels, with the bit level
counted as level 1. A tree of `LEVELS` levels therefore has `LEVELS`-1 levels
of prefix nodes. The default is the minimum, ceil(log2 WIDTH)+1, which is 6
for 32 bits. At that depth the tree is a Sklansky divide-and-conquer tree:

* node (l, i) exists when bit l-1 of i is set;
* it merges [i:k] with column k-1, where k is i with its low l-1 bits
  cleared.

Each extra level makes the tree a little slower and saves nodes, arranged as
follows:

1. The first X levels pair columns up, as in a Brent–Kung tree. Each
   "group column", whose low X bits are all ones, then holds its whole
   2^X-bit block.
2. A Sklansky tree runs on the group columns only.
3. The last X levels fill in the other columns, each from the group column
   below it.

At 32 bits, 6 levels give 80 nodes, 7 levels give 63 and 8 levels give 58.

**Choosing the Ling nodes.** Each node gets a delay from the model

    d = D_INT + R_DR · C_IN · fan-out          (D_INT = R_DR = C_IN = 1)

The package functions add up arrival times forward through the tree, then work
out required times backward from the slowest output. Nodes with zero slack
form the critical path. Each such node becomes a Ling node, together with
every node above it in its column, since a Ling node needs Ling from above.
The last level is the exception: there, a critical node becomes Ling only if
the node above it already is one. Otherwise it stays a standard node and
converts the Ling value it receives.

The default 32-bit tree, with bit 31 on the left (L = Ling node, c =
conversion node, o = standard node):

    level 1  o.o.o.o.o.o.o.o.L.o.o.o.L.o.L.L.
    level 2  oo..oo..oo..oo..Lo..oo..Lo..Lc..
    level 3  oooo....oooo....Looo....Lccc....
    level 4  oooooooo........Lccccccc........
    level 5  cccccccccccccccL................

The critical path climbs the Ling chain in columns 1, 3, 7 and 15. From
column 15 it fans out to all sixteen last-level nodes. The Ling node in
column 1, level 1, is exactly the one-gate H[1:0] above. In total there are
11 Ling nodes, 29 conversion nodes and 40 standard nodes.

**Demand-driven propagate network.** The package functions first list the
propagate range each node needs, following the table above. Each range is then
built from two smaller ones. To split [a:b]:

1. find h, the highest bit in which a and b differ;
2. let c be a with its bits below h cleared;
3. build [a:b] from [a:c] and [c-1:b].

The two pieces are requested in turn. Pieces split this way line up on
power-of-two boundaries, so many nodes share them. No other propagate is
built. The XOR and OR networks are built this way separately. In
`axon_prefix_network`, the array `g_pk[K].pn[a][b]` holds the built ranges
(K = 0 for t, 1 for p). Entries that nothing uses are tied to 0 and are
unused.

**Polarity and inverters.** Every gate inverts. Number the prefix levels
from 1, with the bit signals (all positive) at level 0:

* a gate at an odd prefix level takes positive inputs and gives a negative
  output (AOI, NAND);
* a gate at an even prefix level takes negative inputs and gives a positive
  output (OAI, NOR).

Counted the way `LEVELS` counts, with the bit level as level 1, this is
simply: odd levels positive, even levels negative. A gate at prefix level l
wants its inputs in the polarity of level l-1. An input made at a level of
the other parity passes through an inverter at the consuming gate, and an
unused bit or column simply passes through a level. The sum stage knows
which columns arrive inverted and folds this into its XORs.

This level rule is only a starting point. Moving an inverter along a path
flips the polarity of the nodes it passes, and a different placement can be
faster even with more inverters. The parameter `INV_FLIP` holds one
placement: a set bit (l-1)·32 + i (32 is `MAXW` in `axon_pkg`) flips node
(l, i) against the level rule.
The node then takes the other input polarity and gives the other output.
Inverters appear on whichever edges now join equal polarities, and the sum
stage is told which columns end inverted. Any map gives a correct adder. With
the default map (all zeros) the 32-bit tree has 56 inverters on carry-node
inputs; the arbitrary map the testbenches use gives 106.

## Modules

All modules are combinational and have no clock: the adder is one logic
path from operands to sum.

| module | job |
|---|---|
| `axon_pkg` | constants, node-kind type, and every elaboration-time function: topology, fan-out, Ling choice, propagate ranges, polarity, node counts |
| `axon_bit_pregen` | g, p, t for every bit |
| `axon_prefix_node` | one carry node as AOI21/AOI22/OAI21/OAI22. Parameters: `OUT_LING`, `HI_LING`, `IN_NEG` |
| `axon_p_node` | one propagate node as NAND2/NOR2. Parameter: `IN_NEG` |
| `axon_prefix_network` | the hybrid tree: nodes, propagate networks, inverters. Parameters: `WIDTH`, `LEVELS`, `XOR_P`, `INV_FLIP` |
| `axon_sum_stage` | carries c_{i+1} = G[i:0], or t_i & H[i:0] for Ling columns; S_i = p_i ^ c_i; carry out |
| `axon_adder` | top level: `a_i`, `b_i` (WIDTH) → `sum_o` (WIDTH), `cout_o` |

`axon_adder` parameters: `WIDTH` from 2 to 32 (default 32); `LEVELS` from
ceil(log2 WIDTH)+1 (the default) up to 2·ceil(log2 WIDTH), which is 10 for
32 bits; `XOR_P` (default 1), the choice of propagate networks above; and
`INV_FLIP` (default all zeros), the inverter placement.
Elaboration stops with an error on a size the tree family cannot build. The
adder has no carry input. If you change the delay constants or the topology function in
`axon_pkg`, the Ling choice, propagate network and polarities all follow.

## Where this RTL departs from AXON

* **Topology.** AXON starts from a minimal-node tree with limited fan-out,
  found by a search the paper cites but does not describe. This RTL uses the
  Sklansky / Brent–Kung family above. Depth matches the paper's
  configurations (16b at 5–6 levels, 23b/31b/32b at 6–7 levels). Node count
  and fan-out do not: the default Sklansky tree has fan-outs up to 17.
* **Ling placement rule.** The paper places Ling nodes along the critical path
  of a coarse delay model. The model constants here are assumed. The rule
  that also makes the nodes above a critical node Ling is this design's own.
  With extra levels the rule marks many nodes: 40 of 63 for 32b+L7.
* **Propagate kind of conversion nodes.** AXON says Ling nodes use the OR
  propagate and standard nodes the XOR propagate, but not which one the
  conversion nodes use. Here they use t, as they must where a Ling value
  comes from below. `XOR_P = 0`, one OR network for everything, is this
  design's own option.
* **Inverter placement.** AXON groups the polarity mismatches into clusters,
  tries the inverter positions within each cluster, and keeps the best by
  delay and area. This RTL does not search. It takes one placement as the
  `INV_FLIP` map, and by default uses the plain level rule with each
  inverter at the consuming gate. Describing a placement as flipped nodes is
  this design's own way of writing it down.
* **No gate sizing, no cell library.** Drive strengths and the
  place-and-route results belong to the mapped netlist. A synthesis tool will
  restructure this RTL unless told to keep its hierarchy and cells. The RTL
  fixes the function and the intended structure, not the final netlist.
* **No carry input**, and no pipeline registers.
* **Ling sum.** A Ling column's carry is recovered with a separate AND
  (t & H). The usual Ling sum multiplexer is not used.

## Verification

Each testbench checks its results against values computed independently: the
simulator's own `+`, or group signals rippled bit by bit from their
definitions (`tb/axon_ref_pkg.sv`). Each prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_axon_bit_pregen` | g, p, t on 2000 random words and the corners |
| `tb_axon_p_node` | NAND and NOR forms, exhaustively |
| `tb_axon_prefix_node` | every node kind and polarity, on random 16-bit ranges with real G/H/P values; also the one-gate H[1:0] |
| `tb_axon_prefix_network` | every tree output: all 65536 operand pairs at 8 bits (4, 5 and 6 levels); 20000 random and long-carry pairs at 23 bits (6 and 7 levels) and 32 bits (6, 7 and 8 levels); both `XOR_P` settings; the level rule and a flipped `INV_FLIP` map |
| `tb_axon_sum_stage` | sum and carry out from reference G/H columns |
| `tb_axon_adder` | the default 32-bit adder end to end, on 100000 operand pairs plus corners; counts how often each mechanism was used |
| `tb_axon_workloads` | the eight evaluated configurations (16b+L5/L6, 23b+L6/L7, 31b+L6/L7, 32b+L6/L7) on 40000 operand pairs each, plus 16b+L5 and 32b+L6 with a flipped `INV_FLIP` map |

`tb_axon_adder` also counts how often each mechanism was used, and fails if
any count is zero:

* a Ling column whose H is 1 while the carry is 0, so the t & H recovery
  matters;
* the Ling pseudo-carry differing from the true carry;
* a carry from the low half crossing the conversion level;
* a carry rippling from bit 0 to the carry out;
* the carry out set.

Every testbench has also been run against a deliberately broken copy of its
module, and each copy was caught.

To run one testbench with Verilator 5, from the directory that holds `rtl/`
and `tb/`:

    verilator --binary --timing --assert -y rtl -y tb \
      rtl/axon_pkg.sv tb/axon_ref_pkg.sv tb/tb_axon_adder.sv \
      --top-module tb_axon_adder
    ./obj_dir/Vtb_axon_adder

`-y` lets Verilator find the other modules by their file names. Replace the
testbench file and the top name to run another testbench. Each one
finishes in well under a second.

What is not verified: timing, area and power. These depend on the cell
library and the layout. The RTL reproduces none of the paper's delay, area,
area-delay or energy-delay figures.
