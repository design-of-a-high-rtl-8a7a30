# A multi-engine decision-tree packet classifier for FPGA block RAM

A router has to decide, for every packet, which rule of a rule set
applies. The rule set is ordered by priority. A rule constrains five header
fields: source and destination IP address by prefix, source and destination
port by range, and protocol exactly or as a wildcard. The design here is a
hardware classifier for that task. It is based on a modified HyperCuts
decision tree that fits in on-chip block RAM. Each node of the tree cuts the
header space into equal parts, using a few chosen bits of some fields. The
leaves hold short lists of rules, and these are searched linearly. The two
modifications that matter for hardware:

* **Pre-cutting in place of region compaction.** HyperCuts shrinks each
  node's region to the bounding box of its rules, which needs a division to
  find the child of a header. Here a node can instead fix ("pre-cut") some
  field bits. A header whose bits differ lies outside every rule of the
  node and needs no further search. Every child index is then just a
  concatenation of header bits.
* **Rules stored inside the leaves**, two per memory word. Leaves hold the
  rules themselves, not pointers to them, and the two IP prefixes are
  packed into 35 bits each. A leaf of two rules is thus read in one access.

A classification engine is a pipeline of two units. A tree traverser walks
the tree from a root node held in registers. A leaf node searcher compares
the header with two rules per clock until one matches or the leaf ends. The
traverser can start the next packet while the searcher works on the
previous one. An engine is slow next to the RAM, because its comparators
are deep logic. So four engines take turns on one RAM port, each in its own
phase of a 4-clock cycle. The RAM has two ports, so the full design has two
identical sides of four engines. Engines finish packets out of order, so
each side tags every packet on arrival and puts the results back in order
in a 16-entry sorter.

```
                      +----------------------- rule_memory ----------------------+
                      |   8192 x 320-bit words: pointers, nodes, leaf rules      |
                      |   port A (read)        write port        port B (read)   |
                      +------+-----------------------------------------+---------+
                             |                                         |
   side A  (classifier_side) |                    side B (same)        |
   headers -> packet_header_buffer -> 4 x classification_engine -> memory_interface
                                         |  tree_traverser                      
                                         |  leaf_node_searcher (2 x rule_comparator)
                      result mux (engine k in phase k) -> result_sorter -> results, in order
```

## Search structure in memory

All structures live in one array of 320-bit words. The formats are defined
in `rtl/pc_pkg.sv`.

**Header** (`hdr_t`, 104 bits): SIP 32, DIP 32, SP 16, DP 16, protocol 8.

**Rule** (`rule_t`, 160 bits; slot 0 = word bits 159:0, slot 1 = 319:160):

| bits (MSB first) | field |
|---|---|
| 1  | `last`: final rule of its leaf |
| 16 | rule ID reported on a match |
| 35 | SIP prefix, encoded |
| 35 | DIP prefix, encoded |
| 16 + 16 | SP low, high (inclusive) |
| 16 + 16 | DP low, high (inclusive) |
| 8 + 1 | protocol, and a wildcard bit (1 = any protocol) |

**Encoded prefix** (35 bits), which saves 3 bits over address + 6-bit
length:

* bit 0 = 1: a short prefix, length 0..28. Bits 34:7 hold address bits
  31:4 and bits 6:1 the length.
* bit 0 = 0: a long prefix, length 29..32. Bits 34:3 hold the full address
  and bits 2:1 the length minus 29.

`pc_pkg::ip_encode(addr, len)` produces this form.

**Tree node** (`node_t`, 262 bits in the low end of a word). For each of
the five fields it holds:

* `pre_mask`, `pre_val`: the pre-cut. The header must satisfy
  `(field & pre_mask) == pre_val`, or its child is empty.
* `cut_lsb`, `ncut`: the cut. `ncut` bits of the field, starting at bit
  `cut_lsb`, form part of the child index.

The node also holds `child_base`, a word address. The index is built as
SIP bits, then DIP, SP, DP and protocol, with earlier fields more
significant. At most 12 index bits (4096 children) are kept.

**Child pointer** (`ptr_t`, 20 bits, 16 per word): a 2-bit kind (0 empty,
1 leaf, 2 internal node) and an 18-bit word address. The low 13 bits are
used at the default size. Child `i` of a node is in word
`child_base + i/16`, slot `i % 16`. Node merging costs nothing in hardware:
two pointers may name the same leaf.

**Leaf**: consecutive words of rules in priority order. The final rule has
`last = 1`. If that rule sits in slot 0, slot 1 of the word is ignored.

The root node is not in memory. It is written into the registers of every
engine with `root_we`/`root_wdata`. Its children, like all others, are
pointer words in memory.

A worked shape, the one most testbenches use. The root has `sip.cut_lsb=30,
sip.ncut=2, dp.cut_lsb=15, dp.ncut=1`, so 8 children, indexed
{SIP[31:30], DP[15]}, all in word 0. Child 6 points to an internal node in
word 1. That node pre-cuts DIP[31] to 0 and cuts DIP[30] and SP[15]; its
4 pointers are in word 2. Leaves follow from word 3.

## One engine: traverser and searcher

Both units of an engine advance only in the engine's phase (`ce`). Read as
engine cycles, the timing is that of a plain synchronous RAM: a read
issued in one engine cycle returns in the next.

*Tree traverser* (`tree_traverser.sv`). Suppose a packet is accepted in
engine cycle 0. In that same cycle the root's pre-cut is checked, the child
index computed and the pointer word requested. In cycle 1 the pointer
arrives, and one of three things happens:

* empty: "no match" is reported;
* leaf: the leaf address goes to the searcher (`lns_start`);
* internal node: the node word is requested. In the next cycle its index
  gives the next pointer word, and so on.

A packet thus costs one pointer read at the root plus two reads (node
word, pointer word) for every internal node on its path. The traverser is
`ready` for a new packet as soon as it has handed its leaf over.

*Leaf node searcher* (`leaf_node_searcher.sv`). It reads the leaf one word
per engine cycle. Two `rule_comparator`s check both rules of the word in
the cycle it arrives. Slot 0 wins if both match. The search ends at the
first match, or at the `last` rule with "no match". A hit on the rule in
position i of the leaf therefore costs floor(i/2)+1 engine cycles.

*Sharing the slot.* An engine has one memory access per engine cycle. The
searcher has priority, and a traverser that loses the slot retries in the
next engine cycle. With a tree of only a root and leaves of at most two
rules, the two units alternate: the traverser reads a pointer while the
searcher compares, then the searcher reads while the traverser waits. That
gives one packet every two engine cycles, the peak rate of the design. The
engine testbench measures 100 packets in 202 engine cycles.

The engine's result (`res_match`, `res_nomatch`, `res_rule_id`,
`res_pkt_id`) is registered. No-match is the OR of "empty child" from the
traverser and "leaf exhausted" from the searcher. If both units would
report in the same cycle, the traverser holds its report for one cycle.

## Four engines on one RAM port

The RAM is clocked at the full rate. A phase counter steps 0,1,2,3, and
engine k runs only in phase k. So the engines are four phase-shifted
engines at a quarter of the RAM clock, but built with clock enables on a
single clock. In phase k, `memory_interface` puts engine k's request on the
RAM port. One clock later the data comes back and is kept in engine k's
holding register, where the engine reads it in its next phase. Both sides
run off the same phase counter: side A on port A, side B on port B. While
work is queued, every port carries a request every clock.

Peak rate of the whole design: 2 sides x 4 engines x (1 packet per 2 engine
cycles of 4 clocks each) = **one packet per clock**. The end-to-end test
measures 2000 packets in about 2010 clocks. The "above 220 Mpps" reported
for the FPGA implementation would therefore need the RAM at 220 MHz.

## Keeping results in order

`packet_header_buffer` is a 16-deep FIFO per side. It stamps each header
with a 4-bit packet ID that counts up and wraps. The head of the queue goes
to engine k in phase k if that engine's traverser is ready. The results of
the four engines are multiplexed by phase: engine k's registered result is
taken in phase k. So exactly one result at most reaches the sorter per
clock.

`result_sorter` keeps 16 registers. Register i holds the result of packet
`expected + i`. An arriving result is written into the register its ID
selects. If register 0 is then full, its result goes to the output
register, `expected` advances, and all registers move one step toward the
output. A result that is due therefore passes in one clock, and later ones
wait their turn. No-match results are sorted like matches.

The sorter can only tell 16 IDs apart. So `classifier_side` dispatches a
packet only while fewer than 16 packets of that side are between dispatch
and output. With four engines at most about 10 are ever in flight, so the
limit is a safeguard, not a bottleneck.

## Top-level interface (`hw_accelerator`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | RAM-rate clock, asynchronous active-low reset |
| `root_we`, `root_wdata` (`node_t`) | in | write the root node into all engines |
| `mem_we`, `mem_waddr`, `mem_wdata` | in | write one 320-bit word of the search structure |
| `in_valid[s]`, `in_ready[s]`, `in_hdr[s]` | in/out/in | header input of side s (0 = A, 1 = B), valid/ready |
| `out_valid[s]`, `out_match[s]`, `out_rule_id[s]`, `out_pkt_id[s]` | out | results of side s in arrival order; no back-pressure |

Load the memory and the root while no packets are in flight. Packet IDs
count from 0 after reset, separately for each side. Parameters: `NUM_ENG`
(engines per side, 4) and `BUF_DEPTH` (header buffer, 16). The widths and
the memory depth are constants in `pc_pkg` (`ADDR_W = 13`: 8192 words,
2.6 Mbit).

## What fits

| rule set | needs at least | built | fits? |
|---|---|---|---|
| 1K rules | 1,000 x 160 b = 160 Kbit | 8192 words = 16,384 rule slots | yes: a random 1,000-rule set takes 1,625 words (`tb_workload_1k`) |
| 10K rules | 1.6 Mbit | 2.6 Mbit | only if copying plus tree words stay under 1.64x. The simple 512-child tree of the testbenches needs 14,917 words for a random 10K set, so a better tree or `ADDR_W = 14` is needed |
| 100K rules | 16 Mbit | 2.6 Mbit | no |

These rule set sizes (ACL, firewall and IP-chain sets of 1K, 10K and 100K
rules) are the ones the accelerator was evaluated on. The memory depth is
this design's choice. 8192 words stays below the 3.98 Mbit of the
Cyclone III EP3C120, the device the design was reported on. Raise `ADDR_W`
in `pc_pkg` for larger sets; pointers already carry 18-bit addresses.

## Departures from the source design, and what is left out

* **Clock enables instead of phase-shifted clocks.** The behaviour is the
  same: one RAM access per clock, each engine at a quarter rate.
* **Formats are this design's own.** The field sizes of rules and prefixes
  are the published ones. Their bit order, the node layout (pre-cut
  mask/value, cut position/count), the 20-bit pointers packed 16 per word,
  and the 12-bit index limit are not published and were chosen here.
* **Prefix encoding boundary.** The published description says both "more
  than 28 bits" and "smaller than 28" for the flag bit. Here short means
  length <= 28, which lets the 2-bit code of the long form cover exactly
  29..32.
* **Protocol mask polarity** (1 = wildcard) and **inclusive port ranges**
  are assumptions.
* **Pushing common rules upward** (HyperCuts storing rules at internal
  nodes) is not supported. A tree builder must leave such rules in every
  leaf that needs them. Node merging and removal of overlapped rules are
  tree-builder work and need no hardware.
* **No tree builder is included.** The testbench package `tb/tb_pkg.sv`
  builds two fixed tree shapes for random rule sets. It shows the layout
  but makes no attempt at good cuts.
* **Memory loading** through a separate write port is this design's
  addition. How the search structure gets into the RAM is not described.
* **Dispatch rule** (head of the buffer to the engine of the current phase)
  and the **in-flight limit** are this design's choices.
* The sorter here has 16 slot registers plus an output register. The
  published one is "16 registers and 15 multiplexers", which may count the
  output register among the 16.
* A "packet drop" waveform (signals `V`, `q`, `search_exact`) appears in the
  published results. The logic behind it is not described, and nothing
  here corresponds to it.

## Simulating

Every module and testbench is one file. Testbenches are self-checking and
print `TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/pc_pkg.sv tb/tb_pkg.sv tb/tb_hw_accelerator.sv --top-module tb_hw_accelerator
./obj_dir/Vtb_hw_accelerator
```

Swap in any other testbench name. `tb_pkg.sv` is needed by all except
`tb_packet_header_buffer`, `tb_memory_interface`, `tb_rule_memory` and
`tb_result_sorter`.

| testbench | what it shows |
|---|---|
| `tb_rule_comparator` | prefix/range/protocol matching against a reference that never uses the 35-bit encoding, including prefix lengths 0, 28, 29, 32 |
| `tb_leaf_node_searcher` | first-match order, slot priority, end-of-leaf, and the exact number of engine cycles per search |
| `tb_tree_traverser` | empty children (pointer and pre-cut), internal nodes, leaf hand-over; waits on a busy searcher and on lost memory slots |
| `tb_classification_engine` | full engine against a linear search of the rule set; at a 1-in-3 clock enable; and the peak rate of 1 packet / 2 engine cycles |
| `tb_packet_header_buffer` | FIFO order, packet IDs, full/empty flags |
| `tb_memory_interface` | four engines on one port, data returned to the right engine |
| `tb_rule_memory` | two read ports and the write port |
| `tb_result_sorter` | shuffled results come out in order; a due result passes in one clock |
| `tb_classifier_side` | one side with two engines on a RAM model, in-order results |
| `tb_workload_1k` | whole design with a 1,000-rule set under a 512-child root: memory use, 4000 packets checked, rate achieved (about 0.54 packets per clock with leaves of up to ~19 rules) |
| `tb_hw_accelerator` | whole design at its default size. Both sides get 4000 packets each, checked against linear search; peak rate measured; every mechanism (match, leaf no-match, empty pointer, pre-cut miss, internal node, traverser/searcher overlap, reordering, pass-through, full buffer, both ports busy) must occur |

The reference in `tb_pkg` is a linear search of the plain rule list. It
does not use the tree, so a tree-walk error shows as a wrong rule ID. To
try another tree shape, write a new `build` shape in `tb_pkg`. It only has
to place pointers, nodes and leaves as described above.
