# A systolic forest for common approximate substrings

Given n DNA strings, a *common approximate substring* (CAS) of length m with
error d is a string of m bases that appears, with at most d replaced bases,
somewhere in every one of them. The architecture here, described by J. E. Rice
and K. B. Kent in "Systolic Array Technique for Determining Common Approximate
Substrings", finds all of them in one pass per string:

1. **Preprocessing (software).** Every length-m window of the first string is
   expanded into all motifs within d replacements of it. The motifs are merged
   into a forest of trees: one level per motif position, upper parts of paths
   shared, but every distinct motif ending in its own leaf.
2. **Processing (hardware).** Every tree node is a tiny processor that holds a
   base. Each query string is streamed into the roots, one base at a time,
   with a number between consecutive bases. The numbers collect mismatch
   counts as they move down. When a number arrives at the *exit node* below a
   leaf with a value of at most d, that leaf's motif occurs, within d, in the
   current string.
3. **Result.** An exit node that has recorded a hit for every string marks a
   verified CAS.

Data moves one level per clock and in one direction only. A string of l bases
therefore takes 2l + m clocks, whatever the size of the forest.

This repository gives synthesizable SystemVerilog for the processing
hardware: processing nodes, exit nodes, the forest that wires them, the
sequencer that forms the input stream, and the half-rate clock enable for the
exit nodes. The default build is the forest the authors implemented. It holds
every motif within one replacement of `ACT` (m = 3, d = 1): 21 processing
nodes and 10 exit nodes, with four query strings.

## How a window gets scored

This is the least obvious part of the design, so it gets the most room.

A processing node at level L (roots are level 1) has three registers:

| register | width | role |
|---|---|---|
| base | 2 | the motif base this node stands for |
| mismatch history | L bits | shift register of recent compare results |
| data slot | tag + 8 | the token passing through: base, number or `-` |

Each clock a node takes its parent's data slot into its own slot. A root takes
the forest input instead. On the way in:

* a **base** is compared with the node's base. 0 (match) or 1 (mismatch) is
  shifted into the right end of the history.
* a **number** leaves with the **leftmost** (oldest) history bit added.
* a **`-`** passes unchanged and leaves the history alone.

Bases and numbers alternate, so each number follows one base down the tree.
Call that base c_k. When the number reaches level L, the history there holds
the compare results of the last L bases. Its leftmost bit is the result for
c_(k-L+1). The L-bit history is really a delay line of depth L. On its way
from level 1 to level m the number therefore picks up

    mis(c_k, level 1) + mis(c_(k-1), level 2) + ... + mis(c_(k-m+1), level m)

This is the Hamming distance between the window c_(k-m+1..k) and the path
**read from the leaf up to the root**. Level 1 faces the newest base. So to
search for a motif, its tree must hold the motif reversed: the last base at
the root. The authors' worked example uses the palindrome TCT, which does not
show this. The testbenches that load their own motifs reverse them.

**Start value.** The number that follows the k-th base of a string enters as
x = d + 1 while k < m, and as x = 0 after that. Until m bases of the current
string have gone in, the deeper histories still hold bits left from the
previous string. Starting at d + 1 guarantees that such a partial window can
never pass, because sums only grow. The histories therefore never need
clearing between strings.

**Flush.** After a string's last base and number, m `-` tokens push the last
sums down to the exit nodes. In clock terms, one string is 2l + m clocks.

The example from the source, path A-C-T (levels 1-3) with d = 1 and the string
TCT streamed as `T 2 C 2 T 0 - - -`. Each row is the state after one clock:

| in | L1 hist/slot | L2 hist/slot | L3 hist/slot | at exit |
|---|---|---|---|---|
| T | 1 / T | 00 / - | 000 / - | - |
| 2 | 1 / 3 | 01 / T | 000 / - | - |
| C | 1 / C | 01 / 3 | 000 / T | - |
| 2 | 1 / 3 | 10 / C | 000 / 3 | - |
| T | 1 / T | 10 / 4 | 001 / C | 3 (> d) |
| 0 | 1 / 1 | 01 / T | 001 / 4 | - |
| - | 1 / - | 01 / 1 | 010 / T | 4 (> d) |
| - | 1 / - | 01 / - | 010 / 1 | - |
| - | 1 / - | 01 / - | 010 / - | 1: string list 0001 |

The 8-bit sum can never exceed d + 1 + m, far below 255. An assertion in
`proc_node` would flag a wrap.

## Exit nodes and the half-rate enable

Each exit node (`exit_node`) holds d (4 bits), a string list of N_STRINGS bits
and the last sum it received. Suppose a number s arrives with s <= d while
string j is streamed (j counts from 0 in a batch). Then bit j of the list is
set. Bit 0 is the first string, the rightmost bit in the example above.
`verified` is the AND of the list.

Numbers reach the exit nodes only on every second clock. The authors used this
to clock the exit nodes, their slowest part, from a divided clock.
`exit_clk_div` does the same with a divide-by-two toggle that drives a clock
**enable**, so the design keeps one clock. The toggle follows the input slot
parity, and numbers reach the exit m clocks after they enter. The enable is
therefore `ph ^ M[0]`. It is resynchronised on each string's first base,
because m flush slots flip the parity when m is odd. During the resync the
enable may repeat or skip once, but the trees have just been flushed, so no
number is lost. An assertion in `exit_node` checks that no number arrives
while the enable is low.

Because an exit node only samples on enabled clocks, it keeps its last sum
between numbers. The example figures show `-` there instead.

## Describing a forest

`cas_forest` builds the trees from four elaboration-time tables:

* `NODE_LEVEL[i]`: the level of node i, from 1 to M.
* `NODE_PARENT[i]`: the index of node i's parent, or -1 for a root. A root
  takes the forest input.
* `NODE_CHAR[i]`: the reset value of node i's base.
* `LEAF_NODE[e]`: the leaf above exit node e.

Elaboration stops with an error if a parent is not one level up, or a leaf is
not at level M. A node with several children simply fans its data slot out to
them. That is how shared path prefixes cost nothing extra.

The shape of a neighbourhood forest depends only on m and d, not on the
motif. Under a node that has used e of its d replacements there is one child
that repeats the motif's base. While e < d there are also three children with
the other bases. Node bases can therefore be rewritten at run time
(`char_we`, `char_addr`, `char_data`), so the same hardware can search for
other motifs. The default tables in `cas_pkg` (`FIG2A_*`) are the tree of
`ACT`, as drawn by the authors:

    tree A: A-T-T, A-C-{A,C,G,T}, A-G-T, A-A-T    nodes 0..11
    tree C: C-C-T                                 nodes 12..14
    tree G: G-C-T                                 nodes 15..17
    tree T: T-C-T                                 nodes 18..20
    leaves (exit 0..9): nodes 5, 6, 7, 8, 9, 10, 11, 14, 17, 20

These tables are written root to leaf. The hardware compares them leaf to
root, as explained above. As written, the default forest therefore searches
for the 10 reversals of the neighbours of `ACT`, which are the neighbours of
`TCA`.

Generating the tables is the job of the preprocessing software, which is not
part of this RTL. The testbenches show three generators:

* `cas_fig1_tb` builds unshared chains.
* `cas_shared_tb` merges the neighbourhoods of all windows of a first string
  into one prefix-shared forest, using constant functions.
* `cas_m10d2_tb` builds the prefix-shared neighbourhood tree of one motif for
  m = 10 and d = 2, using constant functions.

## Using `cas_top`

Ports (all synchronous to `clk`; `rst_n` is an asynchronous active-low reset):

| port | dir | meaning |
|---|---|---|
| `d_we`, `d_in[3:0]` | in | load d (into the sequencer and every exit node) while idle |
| `char_we`, `char_addr`, `char_data[1:0]` | in | rewrite one node's base |
| `start` | in | pulse: clear all string lists, string number to 0, begin a batch |
| `s_valid`, `s_ready`, `s_char[1:0]`, `s_last` | in/out/in/in | query bases, one per valid/ready transfer; `s_last` on each string's final base |
| `busy`, `done` | out | batch running / results valid (done stays high until the next start) |
| `verified[LEAVES]` | out | leaf e is a verified CAS |
| `str_list[LEAVES][N_STRINGS]` | out | which strings hit leaf e |

Bases are coded A = 0, C = 1, G = 2, T = 3.

One batch works like this:

1. Load d.
2. Pulse `start`.
3. Stream exactly N_STRINGS strings.
4. Wait for `done`.

`s_ready` is high in character slots only, which come every second clock, so
the maximum rate is one base per two clocks. If the host has nothing to offer
in a character slot, the sequencer inserts a `-` pair and tries again. A
bubble pair never changes a result, it only adds two clocks. Without stalls,
each string takes exactly 2l + m clocks from its first base to the next
string's first base. After the last string, `done` rises 2l + m clocks after
that string's first base.

Strings may be of any length. A string shorter than m cannot hit anything.

## Files

| file | content |
|---|---|
| `rtl/cas_pkg.sv` | base and token types, widths, the default `ACT` forest tables |
| `rtl/proc_node.sv` | processing node |
| `rtl/exit_node.sv` | exit node |
| `rtl/exit_clk_div.sv` | half-rate enable for the exit nodes |
| `rtl/stream_ctrl.sv` | sequencer: base / start value / flush stream, string number, batch control |
| `rtl/cas_forest.sv` | forest built from the shape tables |
| `rtl/cas_top.sv` | top: sequencer + enable + forest |
| `tb/*_tb.sv` | self-checking testbenches, one per module plus workload tests |

## Simulation

Every testbench prints `TB_RESULT checks=N failures=F` and ends with
`$finish`. Each has a watchdog. For example:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        --top-module cas_top_tb rtl/cas_pkg.sv tb/cas_top_tb.sv
    ./obj_dir/Vcas_top_tb

| testbench | what it checks |
|---|---|
| `proc_node_tb` | the example's level-1 steps, then random tokens against a bit-queue model (levels 1 and 3), base reload |
| `exit_node_tb` | the example's exit step (list 0001), random sums for 4 strings, d reload, clear |
| `exit_clk_div_tb` | enable high whenever a number is at the exits, never twice in a row outside a resync, m = 3 and 4, with stalls |
| `stream_ctrl_tb` | exact token sequence (d+1 / 0 rule, m flush tokens), string numbers, 2l + m clocks, stalls |
| `cas_forest_tb` | every register of the A-C-T path through the example; random batches, random d, reloaded bases against a software search |
| `cas_top_tb` | default build end to end, 151 batches. Counts stalls, invalidated partial windows, base reloads, hits, verified solutions and batches without one; fails if any count is zero |
| `cas_fig1_tb` | four strings of length 10, m = 5, d = 1. Software builds a 94-motif forest (470 nodes, 94 exits) and the design must report exactly TGACT, TGCCT, TGGCT and TGTCT. The source lists TGACT twice; the fourth solution is TGTCT |
| `cas_query_len_tb` | default build with queries of 200, 500, 1000 and 2000 bases: 403, 1003, 2003 and 4003 clocks, results checked |
| `cas_shared_tb` | first string ACTTGA, m = 3, d = 1: 34 distinct motifs over 4 windows merged into one shared forest of 53 nodes (84 without sharing). Motifs common to two windows, such as ATT and CCT for ACT and CTT, get a single path. 20 batches checked |
| `cas_m10d2_tb` | m = 10, d = 2: prefix-shared tree with 1660 nodes and 436 exits, four strings of 60 bases, all lists checked |

The last one takes about half a minute to compile; the rest take seconds.

## Sizes

Each processing node at level L holds L + 2 + 10 flip-flops (history, base,
tagged data slot). Each exit node holds N_STRINGS + 4 + 9 (list, d, last sum
and its valid flag). Yosys maps the default build to about 360 flip-flops.

The neighbourhood of one window has sum over i <= d of C(m, i)·3^i motifs:

| m, d | motifs per window | nodes in one shared tree |
|---|---|---|
| 3, 1 | 10 | 21 (the default build) |
| 5, 1 | 16 | 50 |
| 10, 2 | 436 | 1660 |

The authors estimate 8 CLBs per processing node and 130 per exit node on their
FPGA. Unshared, m = 10 and d = 2 would need 4360 nodes and 436 exits per
window, which is why sharing matters.

## Where this RTL departs from the source or fills gaps

Taken directly from the source:

* the node rules;
* the widths: 2-bit bases, 8-bit sums, 4-bit d;
* the d + 1 start value;
* the m-token flush and the 2l + m timing;
* the exit-node rule s <= d and the all-ones test;
* the default forest;
* the idea of the exit-node clock divider.

This design's own choices:

* **Token tag.** Two extra bits mark a slot as base, number or `-`.
* **Start-value rule.** The authors' pseudo-code gives d + 1 "while tick
  count <= m". Their worked example and its caption give d + 1 only for the
  first m - 1 bases. The example is followed, and only it yields correct
  results.
* **Flush length.** The pseudo-code loops k = l..l + m, which is m + 1 tokens.
  m tokens are used, which matches the stated 2l + m steps.
* **String list length.** The text says the list is l bits long. Here it has
  one bit per string, as the example shows. Every streamed string gets a bit,
  including the first (database) string if the host sends it. That string
  hits every leaf of a forest built from its own windows.
* **Record rule.** One remark says solutions are "exit nodes that have sum
  values of d". The algorithm's rule s <= d is used.
* **Clocking.** The divided clock is replaced by a clock enable. Its phase and
  resync logic are new.
* **Host side.** Run-time base and d loading, the valid/ready stream with
  bubble pairs, start/done/clear, the string numbering, the output vectors and
  the reset values are not described by the source.
* **Orientation.** Leaves are matched leaf-to-root, as the node rules imply.
  The source never states this.
* **Node memory.** Kept in flip-flops. The source mentions external SDRAM only
  as an option.

Not included: the preprocessing software, and the source's future-work items
(insertions/deletions, reverses and repeats, extra nucleotide codes).
