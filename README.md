# Hyperdimensional open-modification spectral library search — RTL

Identifying a peptide from a tandem mass spectrum usually means finding the most
similar spectrum in a large library of annotated reference spectra. In an *open
modification search* (OMS) the candidate references are not restricted to those
whose precursor mass matches the query within a few ppm, but to all references
within a wide window (here ±75 Da), so that spectra of peptides carrying an
unknown post-translational modification still find their unmodified relative.
The search space grows by orders of magnitude.

This design makes every comparison cheap by working on **hypervectors**: each
spectrum is encoded once into a binary vector of DHV = 4096 bits, and the
similarity of two spectra is 4096 minus the Hamming distance of their vectors —
an XOR and a popcount. The RTL implements the FPGA part of the RapidOMS
near-storage accelerator (Pinge et al., an FPGA attached to an SSD, the
reference library moving from flash into the FPGA's DRAM peer-to-peer): an
encoder kernel that turns peaks into hypervectors, and a search pipeline that
selects the relevant blocks of the reference library, scores 16 queries at a
time against them, keeps the best standard-window and open-window match of every
query, and passes both result sets through a target-decoy false-discovery-rate
filter.

Everything is SystemVerilog-2017, synthesizable, and simulates with plain
Verilator 5.

## 1. Data path at a glance

```
             host                                    board DRAM (reference library)
   peaks ──► id_level_encoder ──► encoded HV           │ read port (256-bit words)
   (bin, intensity)                                    ▼
                                           ref_orchestrator  (block table, charge & PMZ filter)
                                              │ cmd RUN/FLUSH   │ metadata      │ HV chunks
   query m/z ──► query m/z FIFO ─┐            │                 ▼               ▼
   query HV chunks ──► query     │            │        library m/z FIFO   reference stream FIFO
                 stream FIFO ────┤            ▼                 │               │
                                 └──────► search_kernel ◄───────┴───────────────┘
                                          16 lanes × (XOR+popcount 256 b) ─► find_max_score ×16
                                          reference cache (16 Mbit), result buffers (2 × 2048)
                                              │ (query, best std match, best open match)
                                     ┌────────┴────────┐
                                fdr_filter (std)   fdr_filter (open)
                                     ▼                 ▼
                           standard identifications  open identifications
```

The encoder and the search pipeline are independent kernels that share only
the clock and reset. Encoded references are stored by the host in the DRAM
library; encoded queries are streamed back in by the host.

| constant | value | meaning |
|---|---|---|
| `DHV` | 4096 | hypervector bits |
| `FACTOR` | 16 | chunks per hypervector on every stream |
| `CHUNK_W` | 256 | bits per chunk = DHV/FACTOR, the width of all vector datapaths |
| `Q_BLOCK` | 16 | queries compared in parallel (one "query group") |
| `MAX_R` | 4096 | references per library block = capacity of the on-chip cache |
| `MAX_Q` | 2048 | queries per query set |

These are the published design point; they live in `rtl/rapidoms_pkg.sv`.
`search_kernel` and `fdr_filter` also take them as parameters (`*_P`) so that
smaller instances can be simulated.

## 2. Encoding a spectrum (`id_level_encoder`, `hv_item_memory`)

Preprocessing (outside this RTL) removes peaks below 1 % of the base peak, keeps
the strongest peaks, maps each m/z to a bin index and scales intensities so the
base peak is 0xFFFF. The encoder then takes one peak per cycle:

1. the bin index addresses the **ID memory** (N_ID vectors of 4096 bits), the
   intensity quantised as `level = (intensity × N_LEVEL) >> 16` addresses the
   **Level memory** (N_LEVEL vectors);
2. the two vectors are bound by XOR;
3. 4096 counters (one per bit) add up the bound vectors of all peaks;
4. after the last peak each output bit is 1 iff its counter is strictly more
   than half the peak count (a tie gives 0), and the counters restart.

All 4096 bits are processed in the same cycle. The vector appears three clock
edges after the edge that accepted the last peak and is held until `hv_ready`;
no new peak is accepted meanwhile. The item vectors are written by the host
(random ID vectors, correlated level vectors are the usual choice in ID-Level
encoding; their generation is not part of the RTL). Defaults `N_ID = 1024`,
`N_LEVEL = 16` and `MAX_PEAKS = 64` are this design's choices: with a bin width
of 0.05 m/z a complete m/z range would need tens of thousands of ID vectors, so
`N_ID` is the first parameter to revisit for a real library.

## 3. The library in DRAM and block selection (`ref_orchestrator`)

The reference library is cut into **blocks**: each block holds at most
MAX_R = 4096 references of a single precursor charge, sorted by precursor m/z
(PMZ), stored contiguously. A block is described by

```
block_desc_t = { charge[3:0], min_pmz[31:0], max_pmz[31:0], base[31:0], count[12:0] }
```

and each reference occupies `REC_WORDS = 17` consecutive 256-bit DRAM words:

| word | content |
|---|---|
| 0 | `ref_meta_t` in bits [64:0]: `pmz` [31:0], `ref_id` [63:32], `decoy` [64] |
| 1 … 16 | hypervector chunks 0 … 15, chunk *c* = vector bits [256c+255 : 256c] |

PMZ values are unsigned fixed point with 16 fraction bits (1/65536 Da); `base`
is a word address.

For a query set of one charge with PMZ range [q_min, q_max] the orchestrator
scans its table (one entry per cycle) and selects every block with the same
charge whose [min_pmz, max_pmz] overlaps [q_min − open_tol, q_max + open_tol].
Blocks that cannot contain an open-window candidate are never read. For every
selected block it

* sends the kernel a **RUN** command with the block's reference count and a
  *first* flag on the first block of the query set,
* reads the block's words (one request per cycle, at most 32 outstanding) and
  steers word 0 of each record to the library m/z FIFO and words 1…16 to the
  reference stream FIFO; DRAM data is accepted only when the target FIFO has
  room, so back-pressure reaches the DRAM port.

After the table is exhausted it sends **FLUSH**. The top pulses `run_start` on
every RUN the kernel accepts; the host answers by streaming the query set once
more (the kernel holds only one query group on chip, see below).

## 4. The search kernel (`search_kernel`)

This is where the time goes. One **run** compares the nq queries of the set
(nq ≤ 2048) with the nr references of one block (nr ≤ 4096).

**Query groups.** The queries are processed Q_BLOCK = 16 at a time. A group is
loaded into a register buffer of 16 × 16 chunks (16 PMZ values, 256 chunk
words); the last group may be partial.

**Sliding over the block.** For every reference of the block, the kernel
presents its 16 chunks on 16 consecutive cycles. In each cycle the chunk goes
to all 16 *distance lanes* (`hamming_unit`): lane *l* XORs it with chunk *c* of
query *l*, counts the ones over 256 bits and accumulates. After chunk 15 the
lane holds the full Hamming distance, and `find_max_score` of the lane receives
the score `4096 − distance` together with the reference's PMZ, ID and decoy
flag. So a group costs nr × 16 cycles, whatever Q_BLOCK is; Q_BLOCK sets how
many queries share each reference read.

**The reference cache.** During the first group of a run the chunks come from
the reference stream FIFO and are written, in the same cycle, into an on-chip
RAM of MAX_R × FACTOR = 65 536 words of 256 bits (16 Mbit, the role Ultra RAM
plays on the FPGA); the metadata goes into a 4096-entry RAM beside it. Groups 2
to ⌈nq/16⌉ read the block back from these RAMs and never touch DRAM. DRAM
therefore delivers each block once per query set, and only the first group can
stall on it.

**Best match per query.** `find_max_score` keeps two maxima per lane:

* standard search: `|q_pmz − r_pmz| × 10^6 ≤ std_tol_ppm × r_pmz` (20 ppm by
  default, a run-time input; normalised by the reference PMZ);
* open search: `|q_pmz − r_pmz| ≤ open_tol` (75 Da by default, run-time input).

A maximum and its reference ID are replaced only by a strictly higher score, so
among equal scores the reference seen first wins.

**Merging blocks.** At the end of each group the 16 lane maxima are written to
two result RAMs of MAX_Q entries (standard and open), at the queries' positions
in the set. On the first block of a set they overwrite; on later blocks a new
match replaces the stored one only if its score is strictly higher. A FLUSH
streams the two RAMs out as pairs `(query number, best standard match, best open
match)`, query numbers 0 … nq−1. Each match carries `found`, `decoy`, `ref_id`
and `score`; `found = 0` means no reference fell inside that window.

**Timing.** With streams that never run dry, one run takes exactly

```
Σ over groups g  ( nlanes_g × 16 + 1      load queries
                 + nr × 16                 compute, one chunk per cycle
                 + 3                       drain the lane pipeline
                 + 2 × nlanes_g )          read-merge-write the result RAMs
```

cycles (nlanes_g = 16 except in a partial last group), and FLUSH takes 2 cycles
per query. A full run, 2048 queries against 4096 references, is
128 × (256 + 1 + 65 536 + 3 + 32) = 8.43 M cycles, 38 ms at 220 MHz, the clock
the original FPGA implementation reached. Empty input streams only insert
bubbles; results do not depend on them.

## 5. False-discovery-rate filter (`fdr_filter`)

The library contains decoy spectra (flag in the reference metadata). A decoy
that wins a query estimates how often a wrong target wins. Each result set
(standard, open) has its own filter:

1. **collect**: the nq results are stored in a buffer RAM while two histograms
   over the score range 0…4096 count winning targets and winning decoys;
2. **walk**: from score 4096 down to 0, cumulative targets T and decoys D are
   formed; the threshold is the lowest score where `D × 100 ≤ T × FDR_PCT` with
   T > 0 (`FDR_PCT = 1`, i.e. 1 %). The histograms are cleared on the way;
3. **emit**: the buffer is replayed and every *target* match with
   `score ≥ threshold` leaves on the output stream. Decoys, queries without a
   match and matches below the threshold are dropped. If no score reaches the
   FDR (`thr_valid = 0`) nothing passes.

Timing: 4097 clearing cycles after reset, 1 cycle per result in, 4097 walk
cycles, 2 cycles per buffered result out; `done` pulses after the last one.

## 6. Using the top (`rapidoms_top`)

One search, as the host sees it:

1. load the encoder's item memories (`id_we`/`lvl_we` with `item_wdata`) — once;
2. write the block table (`tbl_we`, `tbl_idx`, `tbl_wdata`) and `n_blocks`;
3. set `nq`, `q_charge`, `q_min_pmz`, `q_max_pmz`, `std_tol_ppm`, `open_tol`
   (hold them for the whole search) and pulse `start`;
4. on every `run_start` pulse, push the nq query PMZs into `qmz` and their
   16 × nq chunks (query by query, chunk 0 first) into `qhv`;
5. collect `std_*` and `open_*` identifications until `std_done`/`open_done`;
   `std_thr`/`open_thr` give the score thresholds.

The DRAM is reached through `rd_req_valid/ready/addr` (in-order,
any latency) and `rd_valid/ready/data`. All handshakes are valid/ready: a
transfer happens in a cycle where both are high; sources hold their data while
valid is high and ready low (assertions check this on the kernel and filter
outputs and on the orchestrator's commands). Reset is active-low and
asynchronous.

## 7. What follows the original design and what is this design's own

Taken from the published accelerator: hypervector size 4096, streaming as 16
chunks of 256 bits, 16 queries in parallel, 4096-reference blocks cached on chip
during the first query iteration and reused for later ones, 2048 queries per
run, ID-Level encoding with XOR binding and bitwise majority, charge-segmented
PMZ-sorted library blocks with min/max PMZ, block selection using the open
tolerance, unrolled XOR + popcount lanes, a max-score search with a 20 ppm
standard and a 75 Da open window, two result sets, target-decoy FDR at 1 %.

Chosen here because the published description does not fix them:

* fixed-point PMZ (16.16) instead of single-precision floats, and normalising the
  ppm difference by the reference PMZ;
* similarity = 4096 − Hamming distance; strict-greater update (first equal score
  wins), also when merging blocks;
* the DRAM record layout, the block descriptor, the RUN/FLUSH protocol, a
  64-entry block table scanned linearly, re-streaming the queries for every
  selected block, per-query result RAMs that merge several blocks;
* the FDR threshold rule (lowest score with D/T ≤ 1 %) and its histogram
  implementation; the filter's placement in hardware (the original may run it
  in host software);
* item-memory sizes (N_ID 1024, N_LEVEL 16), the intensity quantiser, the tie
  rule of the majority, MAX_PEAKS 64; FIFO depths (64); all pipeline depths.

The streams use one 256-bit FIFO carrying the 16 chunks in sequence, where the
original declares an array of 16 narrower HLS streams; throughput is the same,
one chunk per cycle.

Not in the RTL: the SSD, the SmartSSD's PCIe switch and peer-to-peer engine,
the DRAM and its controller (a port is brought out), the host, and spectrum
preprocessing (peak filtering, top-K, binning, normalisation), which runs in
software before the encoder.

## 8. Capacity against the evaluated datasets

| dataset | queries | references | fits? |
|---|---|---|---|
| iPRG2012 vs. Yeast+Human HCD | 16 k | 1.16 M | yes: 631 MB of records in a 4 GB DRAM, 284 blocks, 8 query sets per charge |
| b1927-HEK293 vs. human library | 47 k | 3 M | yes: 1.63 GB of records, 733 blocks, 23 query sets; run with `std_tol_ppm = 5` |

A query set may select at most 64 blocks (table size); larger libraries are
handled by the host reloading the table between query sets. The kernel itself
is bounded only by MAX_R and MAX_Q per run.

## 9. Verification

Every module has a self-checking testbench in `tb/` that compares against an
independently written model and prints `TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_sync_fifo` | order, occupancy, full/empty under random push/pop |
| `tb_sdp_ram`, `tb_hv_item_memory` | registered read, read-before-write |
| `tb_hamming_unit` | 4096-bit distances incl. 0 and 4096, result one cycle after the last chunk |
| `tb_find_max_score` | both windows (references at 0–60 ppm, around ±75 Da), ties |
| `tb_id_level_encoder` | bit-exact encoding, tie rule, 3-cycle latency, output hold |
| `tb_ref_orchestrator` | block selection for four query sets, command order, every word delivered |
| `tb_search_kernel` | reduced sizes, 4 lanes: 10 and 16 queries, two blocks merged, exact cycle count |
| `tb_search_kernel_q32` | same with 32 lanes (second-generation lane count): 80 and 128 queries |
| `tb_fdr_filter` | threshold and accepted set vs. a sorting model, decoys above threshold dropped |
| `tb_rapidoms_top` | whole design at default sizes, small workload (40 queries, 2 of 4 blocks) |
| `tb_rapidoms_full` | whole design at default sizes, iPRG2012 settings (20 ppm / 75 Da): 2048 queries vs. a 4096- and a 512-reference block |
| `tb_rapidoms_hek293` | whole design at default sizes, HEK293 settings (5 ppm / 75 Da): 2048 queries vs. two 4096-reference blocks |

The top-level benches share `tb/rapidoms_bench.sv`, which encodes spectra
with the encoder, uses them as queries, builds a library in a behavioural DRAM
model (`tb/dram_model.sv`, random latency and stalls), runs a software search
and FDR filter for the expected identifications, and counts that each mechanism
actually happened: selected and skipped blocks, first and merged runs, flush,
reads from the stream and from the cache, stalls of the reference stream, DRAM
back-pressure, standard and open-only matches, decoys rejected, matches below
the threshold. The full-size benches run in about 70 s and 2 min. The two kernel
benches share `tb/search_kernel_bench.sv`.

To simulate, for example the end-to-end bench:

```
verilator --binary --timing --assert -Wno-fatal -j 8 \
    -y rtl -y tb +libext+.sv rtl/rapidoms_pkg.sv tb/tb_rapidoms_top.sv \
    --top-module tb_rapidoms_top -o sim
./obj_dir/sim
```

Replace `tb_rapidoms_top` by any other testbench name. Random stimulus comes
from `$urandom`; pass `+verilator+seed+N` for another seed.

## 10. Files

`rtl/rapidoms_pkg.sv` (constants and record types), `rtl/id_level_encoder.sv`,
`rtl/hv_item_memory.sv`, `rtl/ref_orchestrator.sv`, `rtl/sync_fifo.sv`,
`rtl/hamming_unit.sv`, `rtl/find_max_score.sv`, `rtl/sdp_ram.sv`,
`rtl/search_kernel.sv`, `rtl/fdr_filter.sv`, `rtl/rapidoms_top.sv`; the
testbenches and the DRAM model in `tb/`. Each file opens with a description of
its function, interface and timing.
