# Searching, max/min and sorting inside a Cayley-tree memory

The design keeps a list of numbers in a memory organised as a tree, one number
per tree node. Every node also has a handful of flag bits and a tiny bit-serial
processing element. The node talks to its neighbours over a single one-bit
wire, its *state*. A query never reads the words out. Instead the key or the
candidate maximum moves through the tree one bit and one level per clock.
Every node works on the bit it has just received. The answer collects in the
root.

- **Search** for a key takes `W + 2H` clock steps.
- **Max (or min)** over all elements takes `W + H + 1` steps.
- **Sort** repeats "find the max, find all nodes that hold it, switch them off".
  Each distinct value costs `2(W + H + 1)` steps.

Here `W` is the word width and `H` the number of tree levels. For a tree of
`n` nodes `H` grows like `log n`, so search and max cost `O(log n)`, and a sort
costs `O(log n)` per distinct value.

The RTL is written in synthesizable SystemVerilog. Its default size is the one
of the published FPGA prototype: 4-bit words, a tree of order 2 with 3 levels,
that is a root and 9 element nodes.

## 1. The tree

A finite Cayley tree of order `η` (`ETA` in the RTL) is a tree with these rules:

- The root has `η + 1` neighbours, all of them children.
- Every other inner node has one parent and `η` children.
- All leaves sit on the same level.

With `H` levels (root = level 0, leaves = level `H-1`) the node count is

    N = 1 + (η+1) · (1 + η + η² + … + η^(H-2))

| η | H | N  | elements (N-1) |
|---|---|----|----------------|
| 2 | 3 | 10 | 9  (default)   |
| 2 | 4 | 22 | 21             |
| 2 | 5 | 46 | 45             |
| 3 | 3 | 17 | 16             |

The root holds no element: it holds the search key, or receives the max/min.
Nodes are numbered breadth first, so node 0 is the root and nodes
`1 … η+1` are its children. The constant functions in
`cayley_pkg` (`num_nodes`, `node_level`, `child_index`, `parent_index`)
compute the geometry. `cayley_tree` uses them in a generate loop to place
and wire the nodes.

## 2. What a node holds

| item        | meaning |
|-------------|---------|
| `word`      | the W-bit element |
| `state`     | the bit the node shows its parent and children |
| `start`     | the initiate signal has arrived; the operation has begun at this node |
| `match`     | the key bits received so far all equal the word's bits |
| `lc[c]`     | link to child `c` disabled for this operation |
| `lm`        | the node's own word is disabled for this operation |
| `lm_perm`   | the word is disabled for the whole sort (value already reported, or node empty) |
| `empty`     | the node holds no element |
| `cnt`       | local step counter |

All nodes share one clock. A broadcast bundle steps them together:

- `op` selects the operation.
- `init` resets the flags for that operation.
- `run` performs one step.
- `lock` and `clr_perm` are only used by the sort.

No node needs to know its own level. Each one starts when it sees the
*initiate* bit arrive on its state input. From then on it counts its own steps.

## 3. Search: a key wavefront down, a match wavefront up

The key is first written into the root's word. At `init` the root sets
`state = 1`: this is the initiate bit. On the following run steps the root
shows the key, MSB first. Every node copies its parent's state one step
later. The initiate bit and the key therefore travel down the tree as a
wavefront, one level per clock.

A node at level `L` sees the initiate at step `L-1` and key bit `j` at step
`L + j`. It compares each key bit with the matching bit of its own word, and
clears `match` at the first difference (phase 1). The last key bit reaches
the leaves at step `W + H - 2`.

In phase 2 each node sends its `match` bit upward exactly once, on the step
after its last key bit. From then on it shows the OR of its children's states.
A match therefore climbs one level per clock and ORs together with other
matches on the way. The root does the same once its key has gone out. It keeps
a 1 once it has seen one. After `W + 2H - 1` run steps the root's state is
the answer.

**What a node reads must be timed.** In phase 2 a node must not take its
children's states as answers while those children are still forwarding the
last key bits. A node at level `L` sends its match at its step count `W+1`.
Its children send theirs one step later. So the node ignores its children
until its own count reaches `W+3`. The root likewise shows 0 for the two
steps after the key, then starts ORing. With this gating no key bit is ever
mistaken for a match. The paper words this as "a child sends its state up
only after phase 1".

For the default tree (W=4, H=3), counting run steps from 0:

| step | root       | level 1            | leaves (level 2)      |
|------|------------|--------------------|-----------------------|
| init | initiate   |                    |                       |
| 0    | key bit 3  | initiate           |                       |
| 1    | key bit 2  | key bit 3          | initiate              |
| 2    | key bit 1  | key bit 2          | key bit 3             |
| 3    | key bit 0  | key bit 1          | key bit 2             |
| 4    | 0          | key bit 0          | key bit 1             |
| 5    | 0          | own match          | key bit 0             |
| 6    | OR kids    | 0 (kids ignored)   | own match             |
| 7    | OR kids    | OR of leaves       | 0                     |
| 8    | answer     |                    |                       |

A *phase-1-only* search, `OP_IDENT`, stops after `W + H - 1` steps. Every node
then holds `match = (word == key)`. The sort uses it.

## 4. Max and min: bit-serial OR with links that switch off

At `init` every leaf sets `state = 1` as the initiate signal. The inner nodes
start at 0. Each step after that:

- **Leaf:** sends the MSB of its word and rotates the word left by one.
- **Inner node, not yet started:** copies the OR of its children. This is the
  initiate travelling up. It sets `start` when the initiate is seen.
- **Inner node, started:** computes `r` = OR of the bits of all *enabled*
  inputs. The inputs are the children whose link is still on, plus its own
  MSB if `lm` = 0. It shows `r` as its state and rotates its word. Any
  enabled input whose bit differs from `r` is switched off (`lc` or `lm` set)
  for the rest of the operation.
- **Root:** does the same over its `η+1` children and shifts `r` into its
  word from the right.

A link only switches off when it carried a 0 while some other enabled input
carried a 1. Such an input's value is smaller than that of some competitor
with the same prefix. So the bits that emerge from any subtree are exactly
the bits of that subtree's maximum, MSB first. They rise one level per step,
and after `W + H - 1` run steps the root's word is the maximum. Each node has
rotated its word `W` times, so every word is back in place.

Min is the same with AND in place of OR. A disabled input counts as the
neutral bit: 0 for OR, 1 for AND. A leaf whose word is disabled sends the
neutral bit itself.

## 5. Sorting

Sorting descending repeats two phases until every node's word is disabled
for good:

- **Phase A** is a max over the words that are still enabled. The maximum
  ends up in the root's word.
- **Phase B** is a phase-1 search with the root's word as the key. It marks
  every node that holds this value. One `lock` cycle then sets `lm_perm` in
  those nodes, and the sequencer reports the value together with the number
  of marked nodes (`rep_count`, a population count of the match flags).

The next Phase A starts with each node's `lm` loaded from `lm_perm`, so the
reported values no longer take part. At every Phase A `init` the sequencer
checks whether all `lm_perm` are set. If they are, the sort is over.

- Equal elements are reported once, with their count.
- The number of rounds equals the number of distinct values.
- An empty tree reports nothing and finishes one cycle after the command.
- Ascending order uses min in Phase A.

Empty nodes have `lm_perm` = 1 from the moment they are written. They never
match and never take part in max/min. `clr_perm`, issued when any command is
accepted, re-enables every node that holds an element.

## 6. Using the platform (`cayley_imc_top`)

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst` | in | 1 | clock; synchronous active-high reset (all nodes empty) |
| `we`, `waddr`, `wdata`, `wempty` | in | 1, ⌈log2 N⌉, W, 1 | write element `wdata` into node `waddr` (1…N-1); `wempty`=1 marks it empty. Ignored while busy |
| `cmd_valid` / `cmd_ready` | in / out | 1 | command handshake; a command is taken when both are high |
| `cmd` | in | 3 | `CMD_SEARCH`, `CMD_MAX`, `CMD_MIN`, `CMD_SORT_DESC`, `CMD_SORT_ASC` (`cayley_pkg`) |
| `key` | in | W | search key |
| `busy`, `done` | out | 1 | operation running; one-cycle pulse at its end |
| `found` | out | 1 | search answer, valid with `done` and held |
| `result` | out | W | max/min answer, valid with `done` and held |
| `rep_valid`, `rep_value`, `rep_count` | out | 1, W, ⌈log2(N+1)⌉ | during a sort: one pulse per distinct value, in order, with its multiplicity |

Latency, counted from the clock edge that accepts the command to the cycle in
which `done` is high:

| command | cycles | default (W=4, H=3) |
|---------|--------|--------------------|
| search | `W + 2H + 1` | 11 |
| max, min | `W + H + 1` | 8 |
| sort with `k` distinct values | `2(W + H + 1)·k + 1` | 16k + 1 |

The search and max/min counts are one init cycle, the run steps, and one
result cycle. They match the paper's `w + 2h` (search, without the final read)
and `w + h + 1` (max). Consecutive sort reports are `2(W+H+1)` cycles apart.
The paper counts `w + h + 1` steps for each of the two phases of a round and
mentions one more step to reset the flags between them. Here that flag reset
is the init cycle that opens each phase, so it is already inside each phase's
`W + H + 1` cycles.

Inside the top, `imc_sequencer` turns a command into the `init` / `run` /
`lock` sequence. `cayley_tree` holds the nodes. The top adds the match count
and the "all locked" reduction.

## 7. Where this design departs from the paper

The node and root behaviour, the tree shape, the sorting loop and the step
counts follow the paper. The following points are this design's own:

1. **Root after the key.** The printed search procedure leaves the root's
   state at the last key bit. Read literally, every key ending in 1 would be
   reported as found. Here the root clears its state for two steps and then
   ORs in its children (section 3).
2. **Phase-2 gating.** A node ignores its children until its own count
   reaches `W+3`. The paper only says a child answers after phase 1.
3. **Link disabling.** The printed max procedure compares each child's bit
   with a partly accumulated OR, which depends on the order the children are
   visited in. Here every enabled input is compared with the full OR (or AND)
   of the step, which is what the prose describes.
4. **Disabled words.** A node whose word is disabled for good sends the
   neutral bit (0 for max, 1 for min). Nodes can be marked empty, so lists
   shorter than `N-1` elements work.
5. **Reporting.** The paper copies the reported value and its duplicates to
   consecutive memory locations with a standard in-memory bulk copy, which it
   does not describe. Here the value and its count appear on
   `rep_value` / `rep_count` instead.
6. **Ascending sort** by repeated min is an obvious extension; the paper
   describes the descending sort.
7. **Control.** The prototype exposes per-node `data`, `we`, `state` and
   `flag` ports to set the flags from outside. Here a broadcast
   `op` / `init` / `run` bundle does this, driven by a small state machine.
   The command encoding, the handshake and the single addressed write port are
   new.
8. In the paper's worked search example the text lists one element as 6,
   while its figure shows the word `0101` (5). The tests use the text's list.
   Either value gives the same result for the key 9.

The paper's FPGA prototype implements the search only. Its node schematic
shows a step counter, a word register, a bit select driven by the counter, a
"count ≤ W" compare, an XOR for the key bit and an OR over the neighbours. The
search datapath here has the same parts. The max/min and sorting logic is
built from the paper's step-by-step procedures, which no schematic shows.

The paper also describes a second FPGA realisation on a conventional RAM
organisation. The paper gives too little of it to reproduce, and it is not
included.

## 8. Files

| file | contents |
|------|----------|
| `rtl/cayley_pkg.sv` | op and command enums, tree-geometry functions |
| `rtl/imc_node.sv` | non-root node (inner node or leaf via `IS_LEAF`) |
| `rtl/imc_root.sv` | root node |
| `rtl/cayley_tree.sv` | the tree: root + N-1 nodes, state links, write decode |
| `rtl/imc_sequencer.sv` | command state machine, sort loop |
| `rtl/cayley_imc_top.sv` | platform top |
| `tb/tb_imc_node.sv` | node against a step-by-step model |
| `tb/tb_imc_root.sv` | root with driven child bits |
| `tb/tb_cayley_tree.sv`, `tb/tree_check.sv` | tree with order 2 and order 3 against a list model |
| `tb/tb_imc_sequencer.sv` | sequencer against an abstract tree |
| `tb/tb_cayley_imc_top.sv` | end to end at the default size |
| `tb/tb_cayley_imc_sizes.sv`, `tb/top_check.sv` | end to end at 8- to 64-bit words, 4 levels (22 nodes) and order 3 |

Parameters: `W` (word width, default 4), `ETA` (order, default 2) and `H`
(levels, at least 2, default 3). `N` follows from `ETA` and `H`.

## 9. Simulating

With Verilator 5 every testbench builds the same way. For example:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/cayley_pkg.sv tb/tb_cayley_imc_top.sv --top-module tb_cayley_imc_top
    ./obj_dir/Vtb_cayley_imc_top

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops. A
watchdog counts a failure if a run hangs. The test of the full platform covers:

- the paper's two worked examples;
- random lists with repeated values and empty nodes;
- both sort orders and an empty tree.

It checks every answer and every latency against a software model. It also
counts how often each mechanism occurred: a hit, a miss on a key ending in 1,
a link switched off in the root, a repeated value, an empty node, an ascending
sort and an empty sort. A mechanism that never occurred is a failure.
