# Near-memory Iterative Compaction for a PaK-graph genome assembler

De novo assemblers of the PaKman family build a compacted de Bruijn graph,
the *PaK-graph*. Each node, a **MacroNode**, holds one (k-1)-mer, the
bases that can come before it (prefixes) and after it (suffixes), how often
each was seen, and an internal *wiring* that says which prefix continues into
which suffix. Most of the run time goes into **Iterative Compaction**. Every
iteration removes each MacroNode whose (k-1)-mer is lexicographically the
largest among its neighbours. Before it goes, its prefix/suffix connections
are passed to the neighbours as **TransferNodes**, so that no path through
the graph is lost. Repeating this until nothing changes collapses
unbranched chains into long contigs.

The work is memory bound. Each step reads a few hundred bytes of one
MacroNode, does a little arithmetic on it and writes a few words to one or
two other MacroNodes. This RTL therefore puts the compaction logic into
the buffer chip of each DIMM, next to the DRAM. Each buffer chip holds 16
pipelined processing elements (PEs) and a crossbar. A network bridge
between the buffer chips carries TransferNodes whose destination lives on
another DIMM. The host CPU only hands out MacroNode indices and keeps all
DIMMs in step from one iteration to the next.

## Data representation

Bases are 2-bit codes: A=0, C=1, T=2, G=3. A string of bases is stored as an
unsigned number with its first base in the most significant bits. Two
operations then become plain arithmetic:

- Comparing two (k-1)-mers in the compaction order is an unsigned compare.
- Appending string b to string a is `(a << 2*len(b)) | b`.

k is 32, so a (k-1)-mer is 31 bases (62 bits).

An **extension** (one prefix or suffix) is a 64-bit word. It holds a 6-bit
length and up to 29 bases, right-aligned. Length 0 means the MacroNode has
no neighbour on that side.

Every MacroNode owns a fixed 256-byte slot of 32 words at word address
`idx*32`. MacroNodes are sorted by (k-1)-mer across the whole system. DIMM 0
holds the smallest, and the index order matches the (k-1)-mer order.

| words  | part  | content |
|--------|-------|---------|
| 0      | data1 | (k-1)-mer |
| 1      | data1 | header: bit 63 valid, bits 7:4 prefix count, bits 3:0 suffix count |
| 2..5   | data1 | prefixes 0..3 |
| 6..9   | data1 | suffixes 0..3 |
| 10, 11 | data2 | prefix counts, suffix counts (16 bits each) |
| 12..15 | data2 | wiring: word 12+i, bits 16j+15:16j = number of reads going prefix i -> suffix j |
| 16, 17 | data2 | index of the MacroNode reached through prefix 0..3 |
| 18, 19 | data2 | index of the MacroNode reached through suffix 0..3 |
| 20..31 | -     | unused |

The split into *data1* and *data2* serves the pipeline.

- **data1** is the (k-1)-mer with its extensions. It is all that the
  invalidation check needs.
- **data2** holds the counts and wiring. It is read only for MacroNodes
  that are actually being removed.

Words 16 to 19 store the index of each neighbour. A TransferNode can then
name its destination slot directly instead of searching for a (k-1)-mer.

All types and layout constants are in `rtl/nmp_pkg.sv`, together with the
append, neighbour and head/tail functions.

## The three pipeline stages of a PE

```
 host idx -> [load data1] -> MN buffer 4KB -> P1 reg+ALU --(to be removed)-->
          -> [load data2] -> MN buffer 4KB -> P2 reg+ALU -> TN buffer 1KB ->
          -> destination lookup --local--> TN scratchpad 1KB -> P3 ALU -> DRAM
                              \--other PE / other DIMM--> crossbar --/
```

Each stage has its own DRAM port and its own 64-bit request/response
stream. Reads are answered in order, and writes get no answer.

### P1: invalidation check (`nmp_p1_invalidation`)

The load unit reads the ten data1 words. The ALU then computes each
neighbour's (k-1)-mer:

- **through prefix p:** the first 31 bases of `p . kmer`;
- **through suffix s:** the last 31 bases of `kmer . s`.

Each is a shift of a 120-bit concatenation. All eight neighbours are
compared in the same cycle. The MacroNode is removed only if its own
(k-1)-mer is **strictly** greater than every neighbour's. Two neighbouring
MacroNodes can therefore never both be removed in one iteration.

Some MacroNodes are never removed:

- those with no prefix or no suffix (graph ends);
- those with an empty extension;
- "guarded" MacroNodes, whose longest prefix plus longest suffix would
  exceed the 29 bases an extension word can hold.

Guarded MacroNodes are counted separately. Throughput is one MacroNode
every two cycles: one cycle to load the register, one to decide.

### P2: TransferNode extraction (`nmp_p2_extraction`)

Only MacroNodes that P1 marked enter P2. P2 reuses P1's data1 words and
fetches only the ten data2 words. It first clears the valid bit in the
header word, so the slot becomes a hole that later passes skip. It then
visits the 4x4 wiring matrix. For every wire prefix i -> suffix j with a
non-zero count it emits two TransferNodes, one per cycle.

| destination | kind | looks for | replaces it with | new neighbour |
|---|---|---|---|---|
| predecessor (reached through prefix i) | update suffix | its suffix `tail(kmer, len(p_i))` | `tail(kmer, len(p_i)) . s_j` | neighbour of suffix j |
| successor (reached through suffix j) | update prefix | its prefix `head(kmer, len(s_j))` | `p_i . head(kmer, len(s_j))` | neighbour of prefix i |

The count carried is the wire's count. P2 takes 2 + 32 cycles per removed
MacroNode when nothing stalls.

### P3: routing and update (`nmp_dest_calc`, `nmp_crossbar`, `nmp_p3_update`)

Each PE holds a copy of the **mapping table**: one entry per DIMM, giving
the largest (k-1)-mer that DIMM holds. A TransferNode goes to the first DIMM
whose entry is greater than or equal to the destination (k-1)-mer. A key
above every entry goes to the last DIMM.

MacroNode `idx` on a DIMM is **owned** by PE `idx mod 16`. The owning PE
does P1, P2 and every update of that MacroNode. The TransferNode then goes
to one of three places:

- **the PE's own scratchpad**, if it owns the destination;
- **another PE through the crossbar**, if another PE on the same DIMM owns
  it;
- **the bridge port of the crossbar**, if it lives on another DIMM.

Ownership is this design's replacement for a lock per MacroNode. All
updates to one MacroNode are serialised in a single P3, so two TransferNodes
can never race on the same slot.

The scratchpad takes the PE's own TransferNodes first and crossbar arrivals
otherwise. The P3 ALU then does these steps:

1. Read the destination's 20 data words.
2. Check that the slot is valid and holds the expected (k-1)-mer.
3. Find the extension equal to the TransferNode's "looks for" value.
4. Write back three words: that extension, its count word, and its
   neighbour-index word.

A TransferNode that matches nothing is dropped and counted as
*unmatched*. The exact test graphs never produce one.

A hit costs 20 reads plus the DRAM latency plus 6 cycles. A miss costs 3
cycles fewer, because nothing is written back.

## Crossbar and the system

`nmp_crossbar` is a (N+1)x(N+1) switch. With the default 16 PEs it is 17x17:

- ports 0..15 are the PEs;
- port 16 is the network bridge.

Every output has a round-robin arbiter and an output register. An input is
granted only when its chosen output is free, so a blocked output stalls
only the inputs that want it.

`nmp_buffer_chip` (the top) holds the 16 PEs and the crossbar. TransferNodes
that arrive from the bridge go straight to the crossbar port of their
owning PE. The following stay outside the top and appear as ports:

- the DRAM (three ports per PE);
- the bridge (one TransferNode stream each way);
- the host (mapping table writes, one command stream per PE, busy and
  event counters).

The host protocol for one iteration:

1. Issue every valid MacroNode index to its owning PE.
2. Wait until every PE of every DIMM is idle and the bridge is empty.
3. Start the next iteration.

Stop when an iteration removes nothing. This lockstep is required, not just
tidy: a MacroNode's neighbours may only change once its iteration's
decisions have been made.

## Where this departs from, or goes beyond, the published design

- **PE count.** The evaluation starts from 32 PEs per channel. It then
  settles on 16 as the better trade-off, and it costs area and power at 16.
  The RTL uses 16. 32 or 64 is a parameter change (`NPE`).
- **MacroNode format.** The published design keeps variable-size MacroNodes
  and processes those up to 1 KB near memory. Most real MacroNodes are
  256 B to 1 KB. Here every MacroNode is a fixed slot with at most four
  prefixes and four suffixes of at most 29 bases each. Larger MacroNodes
  would have to be handled by the host. This is the main limitation for
  real data.
- **Extension splitting.** When a prefix is wired to several suffixes, the
  predecessor ought to gain several suffixes in place of one. P3 replaces
  the matched extension, so the last TransferNode wins. This is exact for
  unbranched chains, which is what compaction mostly meets and what the
  system tests use. Branching nodes are not merged correctly.
  For the same reason P3 never rewrites the wiring words. The wiring would
  only change when an extension splits.
- **Stage timing.** The source design describes the pipeline one MacroNode
  per stage per step, without clock cycles. Here a step lasts as long as
  its DRAM traffic: P1 does 10 reads plus 2 cycles, and P2 does 10 reads
  plus 34 cycles, one per wiring entry and side. P3 does 20 reads and 3 writes.
- **Ownership by `idx mod NPE`** generalises the source design's worked
  example. There, consecutive MacroNodes go to consecutive PEs, and each
  TransferNode is applied by the PE holding its destination.
- **Neighbour indices** in data2, the valid bit, and all handshakes, widths
  and reset behaviour are this design's own.
  None of them is specified in the source design.
- **Same-iteration ordering.** P3 can update a MacroNode before that
  MacroNode's own P1 check in the same iteration. The check then sees the
  new neighbour rather than the removed one. Nothing prevents this beyond
  the per-iteration lockstep, and it is not proven harmless. In every
  system test the compacted graph still spelled the genome exactly, and
  no TransferNode went unmatched.
- **Not built:**
  - the network bridge (taken from earlier DIMM-to-DIMM link work; its
    protocol is not given);
  - the DRAM;
  - the host CPU and memory controller;
  - the runtime that batches the input and sends large MacroNodes to the
    CPU.

  The testbenches model the bridge, DRAM and host behaviourally. Graph
  construction (k-mer counting) and the final contig walk stay on the host.

## Using and simulating the RTL

Compile the package first, then the rest. For example, the full-size
system test:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/nmp_pkg.sv tb/nmp_ref_pkg.sv rtl/nmp_fifo.sv rtl/nmp_load_unit.sv \
  rtl/nmp_p1_invalidation.sv rtl/nmp_p2_extraction.sv rtl/nmp_dest_calc.sv \
  rtl/nmp_p3_update.sv rtl/nmp_crossbar.sv rtl/nmp_pe.sv rtl/nmp_buffer_chip.sv \
  tb/nmp_dram_model.sv tb/tb_nmp_buffer_chip_full.sv \
  --top-module tb_nmp_buffer_chip_full -o sim
./obj_dir/sim
```

Every testbench ends by printing `TB_RESULT checks=N failures=M` and has a
cycle watchdog. For another testbench, swap the last file and the top
module name.

`tb/nmp_ref_pkg.sv` is an independent string-based reference model. It
generates random genomes, builds the PaK-graph, and computes the expected
invalidation decisions and TransferNodes.

| testbench | what it checks |
|---|---|
| `tb_nmp_fifo` | ordering, full/empty, occupancy under random push/pop |
| `tb_nmp_load_unit` | addresses, gathered words, cycle count with and without memory stalls |
| `tb_nmp_p1_invalidation` | decision against the reference on random and graph MacroNodes, one MacroNode per 2 cycles |
| `tb_nmp_p2_extraction` | exact TransferNode list and header write, 34-cycle timing |
| `tb_nmp_dest_calc` | DIMM/port choice against a reference over random tables and keys |
| `tb_nmp_p3_update` | memory contents after hits and misses, cycle counts |
| `tb_nmp_crossbar` | 17x17: every TransferNode delivered once, to the right output, in order per source; full-rate permutation in one cycle |
| `tb_nmp_pe` | one PE compacting a whole 300-base genome graph to its contigs |
| `tb_nmp_buffer_chip` | 2 DIMMs x 4 PEs, 600-base genome |
| `tb_nmp_buffer_chip_full` | default chip (16 PEs) in an 8-DIMM system, 2400-base genome |
| `tb_nmp_buffer_chip_pe32` | 32 PEs per chip (33x33 crossbar), 2 DIMMs, 1600-base genome |

The two system tests check that:

- the compacted graph, walked along its suffixes, spells the genome
  exactly;
- every PE touches only MacroNodes it owns;
- every bridge TransferNode leaves its own DIMM.

They also require each mechanism to occur at least once: removal, guarding,
local, crossbar and bridge delivery, updates, DRAM back-pressure and host
stall. On the full-size run, 2370 MacroNodes shrink to 176. Of the
TransferNodes, 37 stay local, 817 cross the crossbar and 3534 cross the
bridge.
That is 80.5% inter-DIMM traffic. Of the intra-DIMM traffic, 4.3% stays
in the same PE. A 16-PE, 8-DIMM system spreading neighbours uniformly
would give about 87.5% and 6%.

Parameters to change: `NPE`, `NDIMM`, `MN_BUF_BYTES` and `TN_BUF_BYTES` on
`nmp_buffer_chip` and `nmp_pe`. `K`, `MAXE` and `EXT_MAX` are in
`nmp_pkg`. The slot layout assumes `MAXE = 4`, so changing it means
changing the word map above.
