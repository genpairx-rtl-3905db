# GenPairX in SystemVerilog: a paired-end read mapping pipeline

Short-read sequencers produce DNA fragments read from both ends: two reads of
150 bases whose positions on the reference genome are usually a few hundred
bases apart. Mapping such a pair normally means seeding, chaining and
dynamic-programming (DP) alignment of each read. GenPairX uses the pairing
itself as the filter. It hashes a few long seeds and looks up their genome
locations in memory-resident hash tables. It keeps only locations where read 1
and read 2 land close together, and checks those candidates with a cheap
bit-parallel aligner. That aligner handles the common cases: an exact match,
one or two mismatches, or a short run of consecutive insertions or deletions.
Only the few pairs it cannot resolve are left for a conventional DP aligner.

This repository holds synthesizable RTL for the accelerator datapath of
GenPairX, re-implemented from its published description. It also has a
testbench for every block, and an end-to-end testbench that runs the whole
pipeline at its full default size against a small synthetic genome.

## The pipeline at a glance

```
 read pairs ──► Partitioned Seeding ──► Near Memory Seed Locator ──► 3 x PAF ──► circular ──► 174 x Light
 (2 x 150 b)    6 xxHash32 units        window, 32 channel ports,    (pair       buffer       Alignment
                10-cycle pipeline       centralized buffer,          filter)                  units
                                        dispatcher                                            │
                                           │ 32 HBM channels (SeedMap)   │                     ▼
                                           ▼                             ▼                  results
                                     fallback: no seed hit      fallback: no adjacent pair
```

| Stage | Module | Instances | Timing |
|---|---|---|---|
| Partitioned Seeding | `partitioned_seeding` (6 × `xxhash32_unit`) | 1 | one pair per cycle, 10-cycle latency |
| SeedMap query | `nmsl` (32 × `nmsl_channel`, `central_buffer`) | 1 | one seed lookup issued per cycle; latency set by memory |
| Paired-Adjacency Filtering | `paf_unit` | 3 | one location comparison per cycle |
| Light Alignment | `light_align_array` (174 × `light_align_unit`) | 1 | 156 cycles per alignment per unit |
| Top | `genpairx_top` | | |

Shared types and constants are in `genpairx_pkg`. Bases are 2-bit codes
(A=0, C=1, G=2, T=3), base *i* of a sequence sits at bits `[2i+1:2i]`, and a
read is a 300-bit vector. Every stream between blocks uses a valid/ready
handshake: a transfer happens on a rising edge where both are high.

## SeedMap: the two tables in memory

The reference index (SeedMap) is built offline. Every 50-base window of the
reference is hashed with xxHash32. For every hash value, the **Location
Table** stores the sorted list of positions that produce it, and the **Seed
Table** stores where that list ends. This design spreads SeedMap over 32 HBM
channels: hash `h` belongs to channel `h mod 32` under local index
`k = h div 32`. Each channel holds the Seed Table slice of its hashes at word
addresses `0 .. 2^27-1`, and their Location Table slice from `2^27` on.
Words are 32 bits.

Seed Table entry `k` holds the exclusive end of seed `k`'s list in that
channel's Location Table. The list starts where entry `k-1` ends, or at 0 for
`k = 0`. So one two-word read `[k-1, k]` gives the location range, and one
burst then fetches the locations. The offline step drops seeds with more than
500 locations (the index filter). The channel hardware checks that limit
again: a range longer than 500 is treated as "no locations". It does not
overflow a buffer.

## Partitioned Seeding

A pair yields six seeds: bases 0–49, 50–99 and 100–149 of each read. Six
`xxhash32_unit`s hash them in parallel. Each unit is xxHash32 (seed 0) over a
13-byte little-endian image of the 100-bit seed. The work is cut into 10
register stages:

1. three lane-accumulate steps, each split into a multiply stage and a
   rotate/multiply stage;
2. one tail-byte step;
3. three avalanche steps.

All six units and a side pipeline that carries the pair id and both reads
share one enable, `!out_valid || out_ready`. A stall freezes the whole
stage. The output for a pair comes exactly 10 cycles after it is accepted.

## Near Memory Seed Locator (`nmsl`)

This is the part that determines throughput, and the most involved.

**Sliding window.** At most W = 1024 pairs are in flight. An accepted pair
takes the slot at the window tail. Its reads and id are parked in a window
memory, and its six seeds are sent on one per cycle. `in_ready` drops while
the seeds of the previous pair are still being issued, or while the window
is full.

**Seed switch and channel ports.** Each seed goes to the `nmsl_channel` of
its hash, with its slot, its seed number (0–5) and its local index. A channel
has these parts:

- an input FIFO (1024 deep) that absorbs short bursts of traffic to one
  channel;
- a pending FIFO of outstanding memory requests (16);
- a location-request FIFO.

Each cycle the channel issues one memory request:

- a location burst if one is waiting; otherwise
- a Seed Table read for the next seed query.

A Seed Table response becomes a location request `(start, length)`. The
burst's words then stream out, one location per cycle, towards the
centralized buffer. The last location of a seed is flagged. A seed with no
locations, or a filtered one, produces a single "done, empty" event.
Responses return in request order within a channel, but in any order across
channels. Locations of different pairs therefore interleave freely.

**Location switch and centralized buffer.** `central_buffer` holds W × 6
FIFOs of up to 500 locations: one per seed of every window slot. For each
slot, the six FIFOs live in one 3000-word memory with one write port, plus
a count and a done flag per seed. The switch in front of it lets each
channel write one location per cycle. When two channels target the same slot
in the same cycle, the lower-numbered channel wins and the other holds its
beat; the stall propagates back into that channel's response stream.

**Dispatcher.** The head slot of the window retires once all six of its seeds
are marked done:

- If all three seeds of either read returned no location, the pair goes to
  the fallback port with reason `FB_NO_SEED_HIT`.
- Otherwise the dispatcher waits for an idle PAF instance (lowest index
  first). It then merges the three sorted lists of read 1 into that
  instance's FIFO1 and the lists of read 2 into its FIFO2. The merge
  delivers one location per read per cycle, always the smallest remaining
  head, together with the seed number it came from.
- Finally it pulses `ld_done` with the pair's id and reads, clears the slot
  and advances the window head.

Pairs therefore leave the locator in arrival order. That is what makes the
per-slot buffer safe to reuse.

## Paired-Adjacency Filtering (`paf_unit`)

Each instance holds FIFO1 and FIFO2 (1500 entries each, three seeds × 500)
and walks them like a merge:

1. Compare the two head locations.
2. If `|a − b| < Δ`, emit a candidate: both locations, their seed numbers,
   the pair id and the reads.
3. Advance the list with the smaller head (FIFO1 on a tie).

Δ is the run-time input `cfg_delta`; published values are 200–500 bases. A
pair that produces no candidate at all goes to the fallback port with
reason `FB_NO_ADJACENT`. The unit takes one comparison per cycle, so its
time per pair depends on the list lengths. The published figure of 24.1
cycles is an average over real data, not a constant. Three instances run in
parallel. Their candidates are merged round robin.

## Light Alignment

**The buffer in front.** Candidates enter a 1024-entry circular buffer.
Each candidate becomes two jobs, read 1 and read 2. The read's start is
recovered from the seed location: `start = loc − 50 × seed_number`. A
157-base reference window starting two bases earlier is then requested from
the reference memory. A 32-entry pending queue matches returning windows to
their jobs. Each window is handed to the lowest-numbered idle
`light_align_unit`, and results leave through a round-robin arbiter.

**One unit.** The unit builds 8 Hamming masks at once. Mask `m` compares the
read with the reference shifted by `d = m − 2`, for `d = −2 … +5`. Bit `i` is
1 when read base `i` equals reference base `start + i + d`:

- d = 0 is the unshifted read, and holds mismatches as isolated zeros;
- negative d covers bases inserted in the read (up to 2);
- positive d covers bases deleted from it (up to 5).

Over 150 cycles the unit walks every mask from both ends at once. For each
mask it measures the run of ones at the start (start segment), the run of
ones at the end (end segment), and the number of zeros. It then takes the
mask with the longest start segment and the mask with the longest end
segment. On a tie it prefers the smaller shift, in the order
0, −1, +1, −2, +2, +3, +4, +5. The shift difference `s = d_end − d_start`
and the segment sum classify the read:

| Condition | Result |
|---|---|
| start segment covers the whole read | exact match |
| s = 0 and mask d has 1 or 2 zeros | 1 or 2 mismatches |
| s = +k (k ≤ 5) and segments together cover ≥ 150 bases | k consecutive deletions |
| s = −k (k ≤ 2) and segments cover ≥ 150 − k bases | k consecutive insertions |
| anything else | not aligned (left for DP) |

Scores are those of the edit table GenPairX accepts (score ≥ 276):

| Case | Score |
|---|---|
| exact | 300 |
| 1 mismatch | 290 |
| 2 mismatches | 280 |
| deletions (1–5) | 286, 284, 282, 280, 278 |
| insertions (1–2) | 284, 280 |

They come from match +2, mismatch −8, and a gap costing 12 + 2 per base;
`genpairx_pkg::edit_score` computes them. A result carries:

- pair id and read select;
- `location`, the genome position of read base 0;
- `aligned`;
- `score`;
- edit type, edit length and the position of the first edited base.

A CIGAR string follows directly from these fields. An alignment keeps a unit
busy for 156 cycles:

| Step | Cycles |
|---|---|
| load | 1 |
| masks | 1 |
| scan | 150 |
| select | 1 |
| sum | 1 |
| classify | 1 |
| output | 1 |

`out_valid` rises 154 cycles after the job is accepted.

## Top level and its external ports

`genpairx_top` wires the stages as above. Everything the design does not
contain is a port:

- `in_*`: the read-pair input (from host memory);
- `mem_*[32]`: 32 HBM channel ports. Each takes a request (word address,
  burst length) and returns one 32-bit word per beat, with a last flag, in
  order;
- `ref_req_*` / `ref_rsp_*`: the reference-genome fetch;
- `res_*`: the alignment results;
- `fb_*`: pairs handed to the DP fallback. Both reasons share this port, the
  seed locator having priority.

Every port has valid/ready flow control. Back-pressure on the result port
ripples back in order through these stages, finally stopping the input:

1. the alignment units;
2. the circular buffer;
3. the PAF instances;
4. the dispatcher;
5. the window.

## Where this RTL departs from, or adds to, the published design

- **Read strands.** Only forward-strand matches are found; reverse-complement
  lookup is not modelled.
- **Read storage.** The reads of a pair travel with it through the pipeline
  (window memory, PAF, candidate buffer) rather than being refetched from
  DRAM.
- **Alignment output.** The aligner reports edit type, length and position
  instead of a full CIGAR string. It reports one result per candidate. It
  does not pick the best candidate of a pair, and does not compute MAPQ.
- **Dispatcher rate.** The dispatcher merges at one location per read per
  cycle and serves one pair at a time. With many locations per pair this can
  be slower than the memory side. The published design does not say how its
  dispatcher is built.
- **Measured throughput.** The PAF emits every location pair within Δ. For
  an exact read pair that is 3 × 3 = 9 candidates and 18 alignments, since
  each seed of read 1 pairs with each seed of read 2. Nothing removes these
  duplicates. In the end-to-end test the pipeline's steady state was about
  one read pair per 250 cycles. That is far below one pair per 6 cycles,
  the seed issue limit, and below the alignment array's capacity. The
  bottleneck has not been traced yet; treat throughput figures from this
  RTL as unverified.
- **Buffer between locator and PAF.** The published design also places a
  circular buffer between the seed locator and the PAF units. Here the
  centralized buffer plus the PAF FIFOs play that role, and no separate
  buffer is built.
- **Choices not fixed by the published description:**
  - the memory interface (32-bit words, in-order bursts);
  - channel placement (a seed's Seed Table entry and locations in the same
    channel, hash mod 32);
  - the 32-bit location width;
  - FIFO depths other than the 500-entry seed FIFOs;
  - arbitration orders;
  - the xxHash32 byte image of a seed;
  - the shift set and tie order of the aligner masks.
- **Not built:**
  - the HBM stacks and PHY, the DRAMs and the host link;
  - the DP fallback accelerator;
  - the offline SeedMap construction. The testbenches build small SeedMaps
    themselves.

## Sizes

All parameters default to the published configuration:

- 32 channels;
- window of 1024 pairs;
- 500-entry seed FIFOs, so the centralized buffer holds 1024 × 6 × 500
  32-bit locations, about 12.3 MB;
- 3 PAF instances;
- 174 alignment units;
- 150-base reads and 50-base seeds.

Ordinary synthesis tools struggle with a design this large. The
centralized buffer alone is about 98 Mbit of memory and should map to SRAM
macros.

## Testbenches and how to run them

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog. The checks are:

| Testbench | What it checks |
|---|---|
| `tb_xxhash32_unit` | hashes against a reference xxHash32 (checked itself against published test vectors); latency of 10 enabled cycles |
| `tb_partitioned_seeding` | six hashes, id and reads per pair; 10-cycle latency; one pair per cycle; random stalls |
| `tb_nmsl_channel` | location lists, empty and filtered seeds, against a behavioural memory with a random SeedMap slice |
| `tb_central_buffer` | contents, counts and done flags after concurrent writes with slot conflicts; clearing |
| `tb_nmsl` | merged lists per pair, in order, fallbacks, window full, switch conflicts, waiting for a PAF |
| `tb_paf_unit` | candidates and fallbacks against a reference two-pointer walk, cycle budget |
| `tb_light_align_unit` | every edit of the edit table plus rejected cases; score, location, rebuilt read; 154-cycle latency and 156-cycle interval |
| `tb_light_align_array` | two correct results per candidate; 4 units sustain 4 alignments per 156 cycles; buffer and result stalls |
| `tb_genpairx_top` | full-size top, see below |

`tb_genpairx_top` runs the whole design with every parameter at its
default. It builds a 30 kb random reference with two features:

- a 600-base poly-A run, whose seed has more than 500 locations and is
  filtered;
- a duplicated segment, whose seeds have two locations each.

It builds the full SeedMap into 32 behavioural HBM channels, then sends
1060 pairs of these kinds:

- exact;
- mismatches;
- deletions and insertions;
- a read with two edit types, which must come back unaligned;
- a read not in the reference;
- reads too far apart;
- a read starting in the poly-A run;
- pairs in the duplicated segment.

The fallback port is held back at first, so the first fallback pair blocks
the dispatcher and the window fills and stalls the input. The result port
is held back longer, so the alignment buffer fills and the PAF instances
stay busy. Each pair's outcome is checked. Every
mechanism must occur at least once:

- window full and input stall;
- index filter;
- switch conflicts;
- a finished pair waiting for a free PAF;
- both fallback reasons;
- all alignment outcomes.

The behavioural models `hbm_channel_model` and `ref_mem_model` and the
reference functions in `tb_ref_pkg` are in `tb/`.

With Verilator 5:

```
verilator --binary --timing -Irtl -y rtl -y tb rtl/genpairx_pkg.sv tb/tb_ref_pkg.sv \
          tb/tb_light_align_unit.sv --top-module tb_light_align_unit
./obj_dir/Vtb_light_align_unit +verilator+rand+reset+2
```

Swap in any other testbench name. The full-size top testbench takes several
minutes to compile, because it has 174 alignment units and 1024 buffer slots.
