# MegIS in-storage accelerator: RTL

Metagenomic analysis asks which species are in a sequenced sample. It works by
cutting the sample's reads into short k-mers and looking each one up in a
database built from many reference genomes. That database is far larger than
host memory (hundreds of GB), so on a normal system the analysis is dominated by
moving it out of the SSD. MegIS turns the problem around: the host sorts the
sample's k-mers, and the SSD compares them with its own *sorted* copy of the
database as that copy streams off the flash channels. Because both sides are
sorted, one linear pass finds every match with no random access. Only the small
result ever crosses the host interface.

This repository holds synthesizable SystemVerilog for the accelerator that sits
in the SSD controller. It covers three in-storage operations, all built on the
same per-channel hardware:

1. **Intersection finding.** Sorted query k-mers are compared with the sorted
   k-mer database, one comparator per flash channel.
2. **TaxID retrieval.** The intersecting k-mers are streamed against k-mer
   sketch tables (K-mer Sketch Streaming, KSS). The result is the taxonomic ID
   (taxID) of every matching sketch, for the longest k and for shorter k-mers
   found through prefixes.
3. **Unified index generation.** Two per-species reference indexes are merged
   into one index for the read mapper, with locations shifted by an offset.

The main configuration is the one used throughout the RTL defaults:

- 8 flash channels;
- k = 60 (120-bit k-mers at 2 bits per base);
- two KSS levels;
- 768 pages per 12-MB flash block;
- a 300 MHz clock.

## How the pieces fit

```
               host interface (commands)           firmware (operation start, L2P info)
                        |                                   |
                 +------v-----------------------------------v------+
                 |                  control_unit                   |  1 per SSD
                 +--+-------------------+-------------------+------+
                    | pop / load / emit | compare results   |
  internal DRAM     |                   |                   |
  query batches --> query_batch_manager | (one address per channel)
                    |                   |
   per channel c:   v                   |
   block table --> l2p_sequencer --page requests--> flash channel c (after ECC)
                                                         | records
                         index_generator <---- sketches  v
                                          kmer_register_pair (Curr, Next)
   DRAM query k-mer ----------------> kmer_intersect <---+ Curr
                                          | lt/eq/gt
                                          +---> control_unit
   result port c <-- o_key / o_aux (intersecting k-mer, taxID, or index entry)
```

Each channel has one of each of these units:

- `kmer_intersect`: a 120-bit comparator.
- `kmer_register_pair`: the Current and Next k-mer registers.
- `index_generator`: the KSS prefix detector.
- `l2p_sequencer`: turns the block-level mapping into page addresses.

`control_unit` looks at every channel's comparison result each cycle. It
decides what advances and what is recorded. It also holds the small mode state
machine driven by the MegIS host commands. `query_batch_manager` keeps track of
the two query batches held in the internal DRAM. `intersection_store` gives each
intersecting k-mer its DRAM address. `megis_top` wires it all together and muxes
the datapath between the three operations.

Everything that is not accelerator logic is reached through plain ports on
`megis_top`:

- the NAND flash and its channel controllers with ECC;
- the internal LPDDR4 DRAM;
- the embedded cores running the FTL firmware;
- the host interface.

## Data formats

- **Bases:** A=00, C=01, G=10, T=11. The first base of a k-mer is in the most
  significant bits (`[119:118]`). An unsigned compare of two 120-bit words is
  then exactly lexicographic order, which is the order all MegIS data is sorted
  in. A k-mer shorter than 60 bases is left-aligned, with its unused low bits
  zero.
- **Records:** everything read from flash is a record `{key[119:0], aux[31:0],
  last}` (`megis_pkg::rec_t`):
  - For the k-mer database, `aux` is unused.
  - For a sketch table, `aux` is the taxID.
  - For a reference index, `aux` is the location.
  - `last` marks the final record of the database on that channel.
- **Empty taxID:** taxID 0 (`NO_TAXID`) is the empty entry, shown as "-" in
  the paper's examples. It is never emitted.
- **Query k-mers** sit in the internal DRAM, one per 16-byte slot. The DRAM
  read port returns the 120-bit k-mer for an address.

## Intersection finding

The sorted database is cut into flash pages that are dealt round-robin over
the channels: page p goes to channel p mod 8. Each channel's stream is
therefore sorted and spans the whole k-mer range. Every channel compares *all*
query k-mers of a batch against its own pages. Its query pointer
(address) and its database stream advance independently. The rule each cycle,
for a channel that has both a query k-mer `q` and a current database k-mer `d`:

| compare | action |
|---|---|
| `q == d` | emit `q` as an intersecting k-mer; advance both (when the result port is ready) |
| `q <  d` | advance the query |
| `q >  d` | advance the database |

Once a channel's database is exhausted, its remaining queries are dropped
without output, since they are larger than anything that channel holds. An
operation covers as many batches as the host sends. It ends when two things are
true:

- the host has signalled the end of its sorting step (second `MegIS_Step` with
  the sorting argument);
- every batch held has been read by every channel.

### Where the intersecting k-mers go

Intersecting k-mers are written back into the internal DRAM, where taxID
retrieval will read them. `intersection_store` gives channel c a fixed region at
`op_store_base + c × 16 MiB` and fills it in order, 16 bytes per k-mer:

- `o_addr` carries the write address with each result.
- `st_count` tells firmware how many k-mers each region holds.

Each region is sorted. A k-mer of the database lives in exactly one page and
thus one channel, so the regions are disjoint. The regions are not sorted
relative to each other, though, because pages are interleaved. TaxID retrieval
needs one sorted stream. The paper does not say how the per-channel
intersections are combined into it. In this design a region (or any sorted list
split into batches) is handed to taxID retrieval as a run of batches, the last
one flagged. Running one retrieval per region streams the sketch tables once per
region; a merge of the regions is left open.

If a region fills up, its channel is held. The paper's answer to an intersection
too large for the DRAM is to run taxID retrieval on what has been found and then
resume. That is a firmware sequence, with no hardware of its own here.

### Rate

The Current/Next register pair lets the flash stream keep one record in reserve.
The database can therefore advance on every cycle without a bubble: one compare
per channel per cycle, that is 300 M k-mers/s per channel. A 1.2 GB/s flash
channel delivers about 80 M k-mers/s.

### Query batches

The host cannot hold the whole query set in the SSD's DRAM. It moves it in
batches, and two batch slots of 1 MiB each let the transfer of one batch overlap
the comparisons on the other. A batch exchange works like this:

1. The host (or firmware) writes a batch into the free slot at `bfill_base`.
2. It announces the batch with `bpush_valid` and its length. `bpush_last`
   marks the final batch of a taxID retrieval.
3. `bpush_ready` is low while both slots are full.

Each channel reads the oldest batch it has not finished. A slot is released only
when every participating channel has passed its last k-mer, and it is then
announced by `retire`. A batch can instead point at any DRAM address
(`bpush_use_base`). This is how the intersecting k-mers are fed back in for
taxID retrieval.

## TaxID retrieval (KSS)

This is the least obvious part of the design.

A sketch database maps k-mers to the taxIDs of species. Long k-mers are
specific but often miss; shorter k-mers match more often. KSS stores one sorted
table of kmax-mer sketches with their taxIDs. For each shorter k it stores
**only taxIDs**, one per distinct k-prefix of the sketches, in sorted order. The
shorter k-mers themselves are not stored: they are the prefixes of the kmax-mer
sketches.

The hardware therefore streams three things in sorted order:

- the intersecting k-mers (from DRAM, through channel 0's query port);
- the level-0 table (kmax-mer sketches with taxIDs, on channel 0);
- for each level l ≥ 1, the level-l taxID table (on channel l).

How the pieces cooperate:

- **Rebuilding the keys of level l.** The kmax-mer sketches entering channel 0
  also pass through the `index_generator` of every level l ≥ 1. It compares
  their first `plen[l]` bases with the previous sketch's. When the prefix
  changes, a new shorter k-mer has started. The next taxID is then pulled from
  level l's table and paired with that prefix. The pair goes into level l's
  register pair as the record `{prefix, taxID}`. A sketch enters channel 0 only
  in the same cycle that every level needing a new entry can take it, so the
  levels stay aligned with the sketch stream.
- **Matching.** Level l's Intersect unit compares the query with the level's
  current key on the first `plen[l]` bases only. Level 0 uses all 60.
  - A level whose key is below the query advances.
  - When no level is below the query, the query's lookup is finished. Every
    level whose key equals it emits its taxID on its own result port, unless
    that taxID is empty.
  - The query then advances.

  A level whose output was taken waits without repeating it until the other
  levels' outputs are taken as well.
- **Ending.** The intersecting k-mers may arrive as several batches, for
  example one per channel region. The operation ends once the batch pushed
  with `bpush_last` has been read.

The paper's example, with levels k = 5 and k = 4 (also in the end-to-end test):

- Level 0 holds the 5-mer sketches AAAAA→1, AAAAC→6 and AATCC→2.
- Level 1 holds the 4-mer taxIDs "-" (for AAAA) and 3 (for AATC).
- The index generator sees AAAA, AAAA, AATC: the prefix is new for the first
  and third sketch, so level 1 loads "-" and then 3.
- The query AAAAC yields 6 at level 0. At level 1 it finds only the empty
  taxID and emits nothing.
- The query AATCG misses level 0 and yields 3 at level 1.

Several queries can share a prefix, so a level-l taxID can be emitted more than
once. Removing such repeats is left to the consumer.

## Unified reference index

For read mapping, the indexes of the species found are merged into one. Each
entry is `{k-mer, location}`, and both inputs are sorted by k-mer. Index A
streams on channel 0 and index B on channel 1. Channel 0's Intersect unit
compares the two current keys, and each cycle the smaller entry goes to result
port 0:

- B's locations get `op_offset` added, which is where B's genome sits in the
  combined reference.
- On equal k-mers A goes first, then B, so a common k-mer keeps both locations.

The paper's example with offset 1000 is in the end-to-end test:

- A = {ATT 14, CCA 9, GCT 5}
- B = {AAG 2, CCA 21, TGC 4}
- Result: AAG 1002, ATT 14, CCA 9, CCA 1021, GCT 5, TGC 1004.

More than two indexes are merged by repeated passes.

## Reading the flash: block-level L2P

The databases are only ever read sequentially. The FTL can therefore keep a
block-level mapping instead of a page-level one. The mapping holds:

- the start page;
- the database size;
- for each channel, the sequence of physical blocks.

Data is striped round-robin over the channels, and all channels' active blocks
have the same page offset. `l2p_sequencer` runs once per channel:

1. It starts at (`block_seq[0]`, `start_page`).
2. It issues one page read per accepted request, incrementing the page.
3. After page 767 it moves to the next entry of the block sequence (`bt_idx`),
   back at page 0.

It flags the channel's last page. The block sequence lives in DRAM and is read
through `bt_idx` → `bt_pba`.

## Commands and the operation sequence

The host and firmware drive the design through `cmd_*` and `op_*`. The commands:

| `cmd_op` | meaning |
|---|---|
| `CMD_INIT` | enter metagenomic mode; record the host buffer (`cmd_addr`, `cmd_size`) |
| `CMD_STEP` | toggle start/end of host step `cmd_arg` (0 k-mer extraction, 1 sorting) |
| `CMD_WRITE` | FTL metadata update: handled by firmware, no effect here |
| `CMD_EXIT` | back to baseline-SSD mode (only when no operation runs) |

An operation is started with `op_start` while `op_ready` is high. The start
also passes these settings:

- `op_mode`: `MODE_INTERSECT`, `MODE_TAXID` or `MODE_MERGE`;
- the channel mask;
- the per-level prefix lengths `op_plen`;
- the merge offset `op_offset`;
- the start page and the page count per channel.

Starting clears every register pair and index generator. `op_done` pulses for
one cycle when the operation ends.

## Interface of `megis_top` and timing

- Reset is asynchronous and active low (`rst_n`). Everything is in one clock
  domain.
- All streams use valid/ready handshakes:
  - `pr_*`: page requests out to the flash channel;
  - `fl_*`: records back, after ECC;
  - `o_*`: results out. During intersection finding, `o_addr` is each result's
    DRAM address.
- The DRAM query read is combinational: `q_rd_addr` out, `q_rd_data` back in
  the same cycle when `q_rd_valid` is high. A DRAM with latency would need a
  small prefetch buffer outside this block.
- The block-table read has the same form (`bt_idx` → `bt_pba`, `bt_valid`).
- With no stalls, each channel compares and advances once per cycle.

## Not in this design

These parts belong to the surrounding SSD or host and are reached through the
ports above:

- NAND flash;
- channel controllers and ECC;
- DRAM and its controller;
- the embedded cores and the MegIS FTL firmware, which builds the block table,
  handles `MegIS_Write` and computes page counts;
- the NVMe/SATA interface and PHY;
- the host's k-mer extraction and sorting;
- the read mapper.

## Where the design departs from the paper or fills gaps

- **Record payload.** The paper sizes the k-mer registers at 2×120 bits. Here
  each register also holds a 32-bit taxID/location and a last flag (153 bits),
  since taxIDs and index locations travel with the k-mers.
- **Prefix width.** The Index Generator is 64 bits wide, following the paper's
  width, so shorter-k levels can use prefixes of up to 32 bases.
- **Merge.** Index merging is two-way per pass.
- **Level mapping.** Channel *l* carries level *l* of the KSS tables. Two levels
  are built by default; more need a larger `LEVELS` (three are tested).
- **Intersection overflow.** If the intersecting k-mers outgrow the DRAM, the
  paper runs taxID retrieval on what has been found so far and then resumes.
  Here a full region holds its channel; the pause-and-resume sequence belongs
  to firmware.
- **Read-disturb counts.** The per-block access counts kept for read-disturb
  management are firmware state and are not modelled.
- **Pages per block.** The paper's block is 12 MB with 16-KiB pages, which
  gives 768 pages. Its SSD table lists 196 word lines per block, which for TLC
  gives 588. 768 is the default, and `PAGES_PER_BLOCK` takes either.
- **Intersection layout.** The per-channel DRAM regions of the intersection
  (16 MiB each) are this design's layout.
- **Combining the per-channel intersections.** Each channel's intersecting
  k-mers form a sorted list of their own. The paper streams the whole
  intersection as one sorted list in taxID retrieval but does not say how the
  channel lists are combined. Here each list, or any sorted list, can be fed
  to taxID retrieval; a merge across the regions is not built.
- **Query drop.** Dropping queries beyond a channel's last k-mer, the rule for
  when intersection finding ends, the two-slot release rule and the exit
  command are this design's choices. The paper says only that the SSD returns
  to baseline operation after the analysis.
- **Not supported by the defaults.** The paper also evaluates a 16-channel
  SSD and channel sweeps up to 32 channels. The RTL is parameterised by
  `N_CH`. Besides the 8-channel default, 16- and 32-channel instances are
  simulated for intersection finding; taxID retrieval and merging are
  simulated at 4 and 8 channels only.

## Verification

Every block has a self-checking testbench in `tb/` that compares against
independently computed values and ends with a `TB_RESULT checks=N failures=M`
line:

| testbench | what it checks |
|---|---|
| `kmer_intersect_tb` | 3000 random pairs and prefix lengths against a shift-based reference; the paper's AAAAC/AATCC cases |
| `kmer_register_pair_tb` | random push/pop/clear against a queue model; one record per cycle under a continuous stream |
| `index_generator_tb` | the paper's sketch sequence; random sorted runs; prefix index counting |
| `query_batch_manager_tb` | addresses, last flags, release order, a push stall on two full slots, masked batches, release only after every channel |
| `l2p_sequencer_tb` | the block numbers of the paper's layout example; walks across several block boundaries; one request per cycle; hold under stall |
| `control_unit_tb` | commands, the compare rules of all three modes, loading of shorter-k taxIDs, operation completion |
| `intersection_store_tb` | write addresses per channel region, counts, the full flag, restart with a new base |
| `megis_top_tb` | the whole flow at the default parameters (see below) |
| `megis_top_kss3_tb` | taxID retrieval through the whole accelerator with three levels (k = 5, 4, 3) on 4 channels: the paper's three-table example, then random 5-mer sketch sets where prefixes are shared often |
| `megis_top_ssdp_tb` (with `megis_sweep_bench`) | intersection finding on a 16-channel instance run with 4, 8 and 16 channels enabled by the channel mask, and on a 32-channel instance with 8, 16 and 32; masked channels must stay idle; a stall-free pass checks one comparison per channel per cycle at the full width |

`megis_top_tb` runs the complete flow at the default parameters, with 8 channels
and 768-page blocks, against behavioural models of DRAM, flash channels and
result sinks that all stall at random:

1. `MegIS_Init`, then the host-step commands.
2. Intersection finding of three batches. The database starts two pages before
   a block boundary, so every channel crosses one. The stored regions and
   counts are checked against the expected intersection.
3. Two-level taxID retrieval over three batches, including the example above.
4. The index merge, including the example above.
5. An intersection with nothing stalling. Its cycle count must stay within
   queries + database records per channel plus a few cycles of start-up.
6. Exit.

Every output stream is compared with a reference computed in the testbench. The
test counts each mechanism and fails if any never happens:

- the batch stall;
- flash and DRAM stalls;
- output back-pressure;
- block crossings;
- queries past a channel's end;
- new-prefix loads;
- empty taxIDs;
- merge ties.

To simulate with Verilator 5 (from the directory holding `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
    rtl/megis_pkg.sv tb/megis_top_tb.sv --top-module megis_top_tb
./obj_dir/Vmegis_top_tb
```

Replace `megis_top_tb` with any other testbench name to run a unit test. The
unit testbenches use small parameters (4 channels, 4-page blocks) to keep runs
short; the end-to-end test uses the defaults. The remaining lint warnings are
about unused bits and about the reset being used in assertion disable
conditions.

Synthesised at the default parameters, the top has about 1,370 word-level cells
and 4,280 flip-flop bits. Most of the flip-flops are the eight channels' register
pairs, two 153-bit records each, plus the batch and store bookkeeping. No memories or
latches are inferred.
