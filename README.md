# SeGraM in SystemVerilog: minimizer seeding and bitvector graph alignment

Mapping a DNA read to a *genome graph* means finding where in the graph (a
reference genome plus its known variants, with bases in the nodes and edges
for the alternative paths) the read came from, and how it differs from that
path. SeGraM does this in hardware in two steps:

* **MinSeed** picks a few short substrings of the read (its *minimizers*),
  looks them up in a hash-table index of the graph, discards the ones that
  occur too often, and turns each remaining hit (*seed*) into a *candidate
  region*, a stretch of the linearized graph wide enough to hold the whole
  read plus its possible insertions and deletions. It then fetches that
  subgraph from memory.
* **BitAlign** aligns the read to the subgraph with a bit-parallel edit
  distance algorithm (Bitap, in GenASM's form) that has been extended so that
  a character can have several successors (*hops*) instead of just the next
  one, and returns the edit distance and the list of edit operations.

One MinSeed and one BitAlign form an accelerator; each accelerator owns one
channel of an HBM2E memory stack that holds the graph and the index. The
system has four stacks and 32 accelerators, all independent.

This repository holds synthesizable RTL for the accelerator and the system
around it, and self-checking testbenches for Verilator.

## Data flow of one accelerator

```
 host ──► read scratchpad ──► minimizer finder ──► minimizer scratchpad
 (2 banks)   │                                      (2 banks)
             │                                         │
             │                               frequency filter ◄──┐
             │                                         │           │
             │                                  seed scratchpad    │ memory
             │                                      (2 banks)      │ interface ◄──► HBM2E
             │                                         │           │ channel
             │                            candidate region unit ◄──┘
             │                                         │ subgraph (base + HopBits)
             ▼                                         ▼
      pattern-bitmask generator ──► input scratchpad ──► windowed
                                                        edit-distance array
                                                        + traceback ──► ops, distance
```

All three MinSeed scratchpads are double-buffered (`pingpong_scratchpad`):
a producer fills one bank, commits it with a count and a metadata word, and
continues in the other bank while the consumer reads and then releases the
first. This is how the stages overlap: the host can load read *n+1* while
read *n* is being seeded, and the seeding of the next minimizer proceeds while
BitAlign aligns the previous region.

| Module | Role |
|---|---|
| `segram_pkg` | shared types: minimizer, seed, text entry, edit op, configuration |
| `pingpong_scratchpad` | double-buffered scratchpad (read, minimizer, seed) |
| `minimizer_finder` | finds the read's (w,k)-minimizers |
| `minimizer_filter` | index lookup, frequency filter, seed fetch |
| `region_bounds` | candidate region arithmetic |
| `candidate_region_unit` | seed → region → subgraph fetch → BitAlign start |
| `mem_interface` | shares the channel between filter and region unit |
| `minseed` | the MinSeed accelerator |
| `hop_queue_register`, `bitvector_scratchpad`, `bitalign_pe` | per-PE parts of the array |
| `bitalign_dc` | 64-PE systolic edit-distance array |
| `bitalign_traceback` | walks stored bitvectors back to edit operations |
| `input_scratchpad` | subgraph text with HopBits, and pattern bitmasks |
| `bitalign` | the BitAlign accelerator: bitmasks, windows, result |
| `segram_accel` | MinSeed + BitAlign |
| `segram_module` | eight accelerators (one HBM2E stack) |
| `segram_top` | four modules, 32 accelerators |

## Memory layout

Every read is a 16-byte read at any byte address; the channel answers in
request order. The tables, with the sizes the published design uses and
field positions chosen here:

* **Bucket table**, 2^24 entries of 4 bytes: bits 31..6 index of the bucket's
  first minimizer entry, bits 5..0 number of entries. The bucket of a
  minimizer is the low 24 bits of its hash; the hash is the 2-bit packed
  k-mer itself (A=0, C=1, G=2, T=3, first base in the high bits).
* **Minimizer table**, 12 bytes per entry: bytes 0–3 hash, bytes 4–5 number of
  locations (the frequency), bytes 8–11 index of the first location.
* **Seed location table**, 8 bytes: node ID, offset inside the node.
* **Node table**, 32 bytes: length, linear position of the first character,
  number of outgoing edges, index of the first edge. Nodes are numbered in
  topological order, and characters are stored in that same order, so a
  node's characters are contiguous and the graph has a *linear* character
  position.
* **Edge table**, 4 bytes: destination node ID.
* **Character table**, 2 bits per base, 64 bases per 16-byte word.

The base addresses, the reference length, the frequency threshold, the error
rate E (as E·256) and the per-window edit threshold k come in through
`cfg_t` per accelerator.

## MinSeed

### Minimizers

For k = 15 and w = 10 (minimap2's defaults; the published design does not fix
them) the finder shifts one base per cycle into a k-mer register and keeps
the last w k-mers in a circular buffer. It caches the value and position of
the current window minimum; a new k-mer only has to be compared with it,
unless the cached minimum has just slid out of the window, in which case a
one-cycle comparator tree rescans the buffer. Order is lexicographic on the
2-bit code, ties go to the leftmost k-mer. A minimizer (k-mer, start a, end
b = a + k − 1) is written each time the window minimum moves to a new
position. A 10 kbp random read gives about 1,800 minimizers; if a read
yields more than a bank holds (2,050), the bank is committed as a batch and
filling continues in the other bank; the last batch of a read carries a
"last" flag.

### Frequency filter

Per minimizer: read the bucket, walk the bucket's minimizer entries until
the hash matches, and keep the minimizer only if its frequency is between 1
and the threshold. The locations of a kept minimizer are copied into the
seed scratchpad and committed with the minimizer's a and b; more than 242
locations spill into further banks. After the last minimizer of a read an
empty bank with the "last" flag marks the end of the read.

### Candidate regions and subgraph fetch

A seed at linear position c (node start + offset) ends at d = c + (b − a).
The region is

    x = c − a·(1 + E)            y = d + (m − b − 1)·(1 + E)

for a read of length m, so that the part of the read to the left and right
of the minimizer fits even if it contains up to E·length insertions.
`region_bounds` computes this with E as an 8-bit fraction, rounding down and
clamping to the graph. The region is limited to 11,000 characters (the
input scratchpad).

The unit then walks back through the node table to the node containing x,
and forward node by node to y, writing one entry per character into
BitAlign's input scratchpad: the base and 12 *HopBits*, where bit h−1 says
"this character has an edge to the character h positions later". Inside a
node only bit 0 is set; at a node's last character the unit reads the
node's edges and each destination's first-character position. Edges that
jump more than 12 characters, or past y, are dropped: this is the hop limit
of the design (the published analysis found 12 enough for almost all edges).

Two choices of this implementation: a seed lying within 64 characters of the
diagonal (c − a) of the previous region of the same read is skipped, because
consecutive seeds of one true location would otherwise align the same region
again; and the region unit waits for BitAlign to be idle before writing the
next subgraph, because the input scratchpad has a single text buffer.

## BitAlign

### Bit-parallel alignment with hops

For a pattern (read window) of W bits and a text processed from its last
character to its first, Bitap keeps for every edit count d a bitvector
R_i[d]; bit b = 0 means that the last b+1 pattern characters (in this
implementation's bit order) can be aligned starting at text character i with
at most d edits. With PM(c) the bitmask that has 0 where the pattern holds
character c, and j ranging over the successors of i:

    R_i[0] = AND_j ( (R_j[0] << 1) | PM(T_i) )
    R_i[d] = (R_i[d-1] << 1)                    insertion
             AND_j [ R_j[d-1]                   deletion
                     & (R_j[d-1] << 1)          substitution
                     & ((R_j[d] << 1) | PM(T_i)) ]   match

In a linear text j is only i+1; in a graph it is every character the
HopBits name. A HopBit of 0 contributes a vector of all ones, which is
neutral in the AND.

### The array

`bitalign_dc` is a chain of 64 processing elements, PE d computing R[d]. The
text streams into PE 0 one character per cycle together with its pattern
bitmask and HopBits; each PE passes them on one cycle later, so PE d works
on character i while PE d−1 works on character i−1 and has just produced
R_i[d−1]. Each PE has

* an output register holding its newest result (the successor at distance 1),
* a **hop queue** of the 12 results before that, which gives both the PE and
  its right neighbour the R_j of any successor up to 12 positions away in the
  same cycle, and
* a **bitvector scratchpad** of 128 entries that keeps R_i[d] of every text
  character of the window for the traceback.

Queues are cleared to all ones at the start of each window, so that hops
past the window end are neutral. After the last character has reached PE k,
the controller takes the smallest d whose R_0[d] has a 0 in the top pattern
bit: the window's edit distance. The array makes a single pass, so k is at
most 63 per window; a cyclic reuse of the PEs for larger thresholds is not
built.

### Traceback

`bitalign_traceback` starts at text position 0, distance d and the top
pattern bit, and at each step re-reads from the scratchpads the stored
vectors of character i's successors (and R_i[d−1]), checks which of the four
moves explains the 0 it stands on, in the order match, substitution,
insertion, deletion (first successor first), emits that operation and
moves. An insertion consumes a read base only, a deletion a graph character
only. It costs two cycles per successor read and one decision cycle per
operation.

### Windows

Reads up to 10 kbp and regions up to 11,000 characters do not fit a 128-bit
array, so alignment proceeds in windows of 128 read bases and 128 graph
characters, as in GenASM. The traceback of every window but the last stops
after 80 read bases or 80 characters (overlap O = 48, chosen so that a
10 kbp read takes 125 windows, the figure quoted for the published design);
the next window starts where it stopped. The alignment is therefore anchored
at the first character of the region and free at its end. The total edit
distance is the number of non-match operations emitted. When a window has
no alignment within k edits, the result is flagged as failed.

The pattern bitmasks of a whole read are built once per read from the read
scratchpad (second read port), 16 bases per cycle, and kept in the input
scratchpad for all regions of that read; the read scratchpad bank is only
released when both the minimizer finder and the bitmask generator are done
with it. A new read's bitmasks are built only after the region unit signals
the end of the previous read.

### Timing

Per window: about 10 cycles to gather the 128-bit bitmasks, 128 cycles of
streaming plus k cycles to drain the array, and a traceback of 2–4 cycles
per operation. In simulation this averages about 680 cycles per window,
against about 272 for the published design, whose traceback overlaps with
the next window and is evidently faster. This is the largest known
departure.

## System

`segram_module` places eight accelerators side by side, `segram_top` four
modules. Graph and index are meant to be replicated per stack, so any
accelerator can map any read; the host distributes reads. Every port of the
top is a per-accelerator array (`[32]` of the accelerator's ports):

* host input: `host_ready`, `host_wr_en/addr/data` (32-bit words of 16 bases,
  base j in bits 2j+1..2j), `host_commit` with `host_len` (bases);
* configuration: `cfg` (`cfg_t`);
* memory channel: `ch_req_valid/ready/addr`, `ch_resp_valid/data` (128 bits,
  in order, any latency, up to four requests outstanding);
* results: `op_valid/op` (edit operations, region order), then `res_valid`
  with `res_x` (region start), `res_dist`, `res_fail`; one result per
  aligned region;
* `events`: one-cycle pulses for read end, minimizer dropped, minimizer kept,
  edge dropped by the hop limit, minimizer batch, window done.

Reset is asynchronous, active low (`rst_n`) for control state; the arrays
(scratchpads, PE registers, hop queues) have none and are cleared
functionally where it matters.

## Sizes and what fits

| Parameter | Default | Origin |
|---|---|---|
| read scratchpad | 2 × 625 × 32 bit | 10 kbp reads |
| minimizer scratchpad | 2 × 2,050 × 80 bit | published size |
| seed scratchpad | 2 × 242 × 64 bit | published size |
| PEs, bits per PE | 64, 128 | published |
| hop limit | 12 | published |
| bitvector scratchpad | 128 × 128 bit per PE (2 kB) | published |
| input scratchpad | 11,000 × 14 bit + 625 × 64 bit | ≈ 24 kB, published |
| window overlap O | 48 | derived |
| k, w | 15, 10 | own choice |

These hold a 10 kbp read with 10 % error (region 11,000 characters, clipped
by at most 16), short reads of 100–250 bp, and whole-genome graphs of up to
2^32 characters and nodes with a 16 GB channel address space.

## Departures and limits

* BitAlign needs about 2.5× more cycles per window than the published figure
  (serial traceback, no overlap of traceback and the next window).
* The edit-distance array is single-pass: at most 63 edits per window.
* Regions of the same read within 64 characters of diagonal are aligned once
  (own choice, not described in the published design).
* The alignment is anchored at the region start; a read that begins with
  insertions relative to x is handled by the region margin, not by a free
  start.
* Edges longer than 12 characters are dropped, as published; reads that need
  such an edge are aligned with the corresponding deletions.
* Minimizer order is lexicographic; no hashing of k-mers is applied.
* The HBM2E stacks, the host and the offline graph and index construction are
  outside this RTL.

## Simulating

All testbenches are in `tb/` and run with plain Verilator 5, for example

```
verilator --binary --timing -Irtl -Itb rtl/segram_pkg.sv rtl/*.sv \
          tb/tb_bitalign.sv --top tb_bitalign -o sim
./obj_dir/sim
```

(`rtl/segram_pkg.sv` must come first). Each prints
`TB_RESULT checks=N failures=M`.

| Testbench | What it covers |
|---|---|
| `tb_pingpong_scratchpad` | bank handshake, two read ports, both banks full |
| `tb_minimizer_finder` | minimizers against a software definition, batching, stalls |
| `tb_region_bounds` | region arithmetic, clamping, latency |
| `tb_mem_interface` | routing of in-order responses, round robin, in-flight limit |
| `tb_bitalign` | distance against dynamic programming, op replay, multi-window reads, a graph bubble needing a hop, threshold failure, cycles per window |
| `tb_segram_accel` | one accelerator on a small generated graph and index: alignments, exact counts of minimizers filtered, dropped and batched, hop-limit drop, backpressure |
| `tb_segram_top` | the full 32-accelerator system at default parameters, same checks per accelerator (compiles in about 2 minutes, runs in about 2) |

`tb/segram_tb_env.svh` builds the test graph (random reference nodes,
one-base insertion branches, a 14-base insertion whose bypass edge exceeds
the hop limit, a repeated segment for frequent minimizers), writes the
tables above into a memory model and computes minimizers independently of
the RTL.
