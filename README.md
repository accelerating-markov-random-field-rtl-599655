# A Gibbs-sampling accelerator for Markov random fields with label histograms

Many image-analysis problems (stereo depth, optical flow, segmentation) can be
written as a first-order Markov random field: every pixel is a random variable
(RV) that takes one of L labels, and its energy depends on two pieces of
per-pixel data and on the labels of its four nearest neighbours. Gibbs sampling
draws each RV's new label from the Boltzmann distribution of its energy, given
its neighbours' current labels. Run long enough, the samples give not only a
good labelling but also, per RV, a histogram of labels — a direct measure of
how certain the answer is (uncertainty quantification).

This design does that in hardware. The image is cut into tiles, one tile per
processing element (SPE) in a D x D array. Inside a tile, RVs are coloured like
a checkerboard: all RVs of one colour are independent given the other colour,
so they can be sampled in parallel. Each SPE has S sampling units (SPUs) that
each produce one new label every L cycles. Histograms are kept cheaply: the
label memory holds, per RV, the two most recently picked labels with 6-bit
counters; when a third label appears or a counter saturates, a 32-bit message
(RV address, label, count) goes out through a tree of DRAM hubs to a DRAM
interface, which packs 16 messages into a 512-bit line and appends it to a log
in DRAM. The full histogram of an RV is the sum of its log messages plus the
two counters still on chip.

Default configuration: 4 x 4 SPEs, 2 SPUs each, up to 16384 RVs per SPE
(262,144 RVs in all), up to 64 labels.

## Block map

```
mrf_accel                       top: array + hub tree + DRAM interface, runtime port
 ├─ spe_array                   D x D SPEs, neighbour links, global hold / idle
 │   └─ spe (x D*D)
 │       ├─ spe_scheduler       checkerboard schedule, groups, prefetch, flush
 │       ├─ s1mem               singleton 1 per RV
 │       ├─ s2mem               singleton 2, S banks, per-label offset table
 │       ├─ lmem                label memory, 2 colours x 4 banks, histogram update
 │       │   └─ lmem_update     replacement rule, message generation
 │       ├─ label_switch        picks the 4 neighbour labels (local or adjacent SPE)
 │       ├─ s2_switch (x S)     picks singleton 2 (local or one of 8 neighbours)
 │       ├─ spu (x S)           energy -> probability -> sample
 │       │   ├─ spu_energy, spu_e2p, lfsr19
 │       └─ msg_fifo            log-message queue
 ├─ dram_hub_tree               4-ary tree of dram_hub
 └─ dram_if                     512-bit line packing, log index, flush
mrf_pkg                         shared widths, entry/message structs, bank table
```

## The SPU: one sample per L cycles

For an RV the SPU receives L consecutive cycles, one per label l, carrying
singleton 1 (fixed for the RV), singleton 2 for label l, and the four
neighbour labels with a mask of which neighbours exist. Three stages of L
cycles each work on three RVs at once, joined by ping-pong buffers:

1. **Energy.** E(l) = alpha·|d1 − d2(l)| + beta·Σ|l − n_i| over existing
   neighbours, saturated at 255. The running minimum is tracked.
2. **Scale and weight.** E_s(l) = E(l) − E_min, so the best label always has
   E_s = 0. A weight P(l) ∈ {8, 4, 2, 1, 0} is chosen by comparing E_s with
   four thresholds; the cumulative sum of weights is stored.
3. **Sample.** A 12-bit random number r (low bits of a 19-bit LFSR, stepped
   once per RV) gives the threshold (r · total) >> 12; the sampled label is
   the first whose cumulative weight exceeds it.

The weights approximate exp(−E_s/T) in powers of two. The runtime computes
the thresholds for a temperature T as th_k = floor(T · ln(15/k)) for
k = 1, 2, 4, 8 and passes them as `cfg_t_lut = {th1, th2, th4, th8}`
(E_s ≤ th8 gives 8, else ≤ th4 gives 4, and so on; above th1 gives 0).
T = 0 means all thresholds 0: only minimum-energy labels can be drawn.
With integer E_s this is exactly the source's rule P = 2^floor(log2(15·exp(−E_s/T)))
(0 when below 1).

The temperature is fixed for one run. For simulated annealing, where T falls
from iteration to iteration, the runtime issues a sequence of short runs
(one or a few iterations each, `cfg_hist_start = cfg_num_iters` so nothing
is counted) and changes `cfg_t_lut` between them; the labels stay in the
label memory from run to run. A per-iteration temperature schedule held on
chip is not built.

Throughput is one RV per L cycles per SPU; the sampled label appears 3L+1
clock edges after the RV's first label was taken.

## Scheduling and the neighbour exchange

This is the part that needs the most care.

**Order.** A run is `cfg_num_iters` iterations; each iteration updates every
black RV ((r+c) odd), waits for the pipeline to empty, then does the same for
white RVs. Within a colour the scheduler forms groups of S RVs of that colour
in one row, two columns apart (columns c0, c0+2, …), one per SPU. A group
occupies a window of L cycles in which label l is streamed to all SPUs in the
same cycle.

**Prefetch.** Each RV needs its four neighbour labels and singleton 1 once.
During the first S cycles of a window the scheduler reads them for SPU k's RV
of the *next* group (one RV per cycle); at the window's last cycle they move
into the registers that feed the SPUs. A colour phase therefore begins with
one prologue window that only prefetches. This needs L ≥ S+1.

**Label banks.** The label memory of each colour is split into four banks so
that the four neighbours of any RV are in four different banks and can be read
in one cycle. Bank of RV (r, c), by (r mod 4, c mod 4):

| r mod 4 | c=0 | c=1 | c=2 | c=3 |
|---|---|---|---|---|
| 0 | 0 | 2 | 1 | 3 |
| 1 | 0 | 3 | 1 | 2 |
| 2 | 1 | 3 | 0 | 2 |
| 3 | 1 | 2 | 0 | 3 |

A bank word is ((r>>2)·(w>>2) + (c>>2))·2 + r[1], so tile width and height
must be multiples of 4.

**Across tile edges, in lockstep.** All SPEs run the same schedule on the same
cycles (shared start, shared hold, and a shared "all pipelines empty" signal
that ends each flush). When an RV is on the tile edge, its neighbour address
is wrapped to the opposite edge of the tile. Every SPE reads that same
wrapped address at the same time — and the word it reads is exactly the
neighbour that the SPE on the other side needs. So each SPE sends its four
bank outputs to its four adjacent SPEs, and the label switch takes an edge
neighbour from the adjacent SPE's bank output instead of its own. No request
or response protocol is needed. At the edge of the whole image the neighbour
does not exist; the SPE knows this from its `at_edge` input and the SPU leaves
that neighbour out of the energy.

**Singleton 2** works the same way with eight neighbours. Its address is the
RV's position plus a per-label (row, column) offset from a 64-entry table
loaded by the runtime (for stereo, l columns to the left; for motion, a 7x7
window). The memory has S banks, each holding pairs of columns in turn, so the
S RVs of a group (two columns apart, same offset) always hit S different
banks. A target outside the tile wraps; the SPE whose tile actually holds it
reads the same wrapped position at the same time and its bank outputs reach
the requester through the singleton-2 switch (region code 0..8, 4 = own tile).
Offsets must be smaller than the tile; farther reach needs the data to be
replicated by the runtime.

**Write-back.** The S SPUs of a group finish together; their labels are
written into the label memory one per cycle as a read-modify-write.

## Histogram log

Each label-memory entry is 32 bits: MRP (most recently picked) label and
count, LRP (less recently picked) label and count, 6 bits each, with 4 unused
bits beside each label. On writing a new label:

* it equals MRP: count + 1; a saturated count (63) is logged and restarts at 1;
* it equals LRP: the two swap, the new MRP's count + 1 (saturation as above);
* otherwise: the LRP pair is logged as {address, label, count} (unless its
  count is 0), the old MRP becomes LRP, the new label becomes MRP with count 1.

Before iteration `cfg_hist_start` (warm-up) the label is replaced and both
counts are cleared, without messages.

Messages are {20-bit RV address = {SPE id, r·w + c}, 6-bit label, 6-bit count}.
Each SPE queues them (64 entries). If any queue is nearly full, all schedulers
hold before their next window, so nothing is lost even if DRAM is slow; in
normal operation messages are rare and the hold does not occur. The hubs merge
four channels each, round-robin, with valid/ready handshakes; with 16 SPEs two
levels of hubs feed the DRAM interface. The interface writes each full line at
address `log_index` and increments it. After a run, `log_flush` writes the
partial last line (unused slots are zero, i.e. count 0) once the network is
empty, and `log_done` pulses.

## Using the top (`mrf_accel`)

1. While idle, load every SPE through the runtime port (`host_spe` selects the
   SPE, row-major): `TGT_S1` and `TGT_S2` write data[5:0] at (`host_r`,
   `host_c`); `TGT_LUT` writes table entry `host_c` with row offset
   data[15:8] and column offset data[7:0] (signed); `TGT_LMEM` writes a full
   32-bit entry (initial label as MRP, counts 0).
2. Set `cfg_w`, `cfg_h` (tile, multiples of 4, width also a multiple of 2S),
   `cfg_num_labels` (S+1 … 64), `cfg_alpha`, `cfg_beta` (4 bits),
   `cfg_t_lut`, `cfg_num_iters`, `cfg_hist_start`. Keep them steady during a run.
3. Pulse `start`; wait for `done`.
4. Pulse `log_flush`; wait for `log_done`. Lines 0 … `log_index`−1 hold the log.
5. Read back each RV's entry with `host_re` (data one cycle later): MRP is the
   final label, and the two counts complete the histogram.

The DRAM port is a plain line write: `dram_valid`, `dram_addr`, `dram_data`
held until `dram_ready`. `stalled`, `flushing` and `phase_black` show the
scheduler's state.

## Where this design follows the source and where it chooses

Taken from the source: the array of SPEs with nearest-neighbour links (4 for
labels, 8 for singleton 2); SPE contents (scheduler, two singleton memories,
black/white label memory, switches, SPUs); the SPU's three-stage structure
with energy, minimum-energy scaling, a 4-bit transition weight, a 19-bit LFSR
and inverse-transform sampling; black/white ordering with a flush; the 4-bank
checkerboard banking of the label memory and the 2-column banking of singleton 2
with an offset table; the 32-bit entry and message formats and the two-pair
replacement rule; 4-ary DRAM hub tree; 512-bit lines and a log index.

This design's own choices: the energy terms as absolute differences; the
threshold encoding of the temperature; LFSR taps, seeds and stepping; the
random-threshold scaling; the group/window/prefetch schedule; lockstep
operation with wrapped addresses for cross-tile reads; region codes for the
singleton-2 switch; bank word addressing; one label switch per SPE on the
other colour's banks (the source draws one per colour); warm-up behaviour;
not logging empty evictions; the global hold; queue depth; round-robin hubs
with valid/ready; line padding and the flush handshake; the runtime port.

Limits: singleton-2 offsets must stay within one tile of distance; tiles are
multiples of 4 in both directions; L ≥ S+1.

## Capacity against the evaluated images

At the default size (16 SPEs x 16384 RVs, 64 labels) every image of the
evaluation fits: e.g. 584x388 with 49 labels needs 148x100 = 14,800 RVs per
tile; 450x375 with 56 labels needs 116x96 = 11,136. Full-HD frames
(2,073,600 RVs) need a larger array, e.g. D = 32 with 4096 RVs per SPE,
which is a parameter change that has not been simulated.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. Build and run one with, for example:

```
verilator --binary --timing -Irtl -y rtl rtl/mrf_pkg.sv tb/tb_mrf_accel.sv --top-module tb_mrf_accel
./obj_dir/Vtb_mrf_accel
```

* `tb_mrf_accel` — the whole chip at default parameters on an 8x4 tile per
  SPE (512 RVs), two runs (moderate temperature with warm-up and a slow DRAM;
  temperature 0 for 70 iterations). For every RV: log counts + on-chip counts
  = number of histogram iterations, labels in range; run length matches the
  schedule. After the temperature-0 run, every white RV's final label must
  have minimum energy given its final neighbours, with the energy recomputed
  in the testbench over the whole image (this crosses SPE boundaries for both
  neighbour labels and singleton 2). It counts and requires hold, flush,
  evictions, saturations, cross-SPE label and singleton-2 reads, histogram
  switch-on, DRAM back-pressure and a padded partial line.
* `tb_spe_array` (2x2), `tb_spe` (single SPE) — the same conservation checks.
* `tb_spu` — reference energy/weight model; exact latency 3L+1; only
  nonzero-weight labels; argmin at T = 0; uniform draws for equal energies.
* `tb_lmem` — reference replacement rule, message timing, neighbour bank reads.
* `tb_spe_scheduler` — coverage of each colour, windows, prefetch targets,
  hist_en, hold, run length.
* `tb_s2mem`, `tb_s2_switch`, `tb_label_switch`, `tb_s1mem`, `tb_dram_hub`,
  `tb_dram_hub_tree`, `tb_dram_if` — reference models of addressing, routing,
  ordering, fairness, latency and packing.

At non-zero temperature the sampled labels are checked for legality, for
nonzero weight (SPU level) and for the histogram bookkeeping, not compared bit
for bit against a software Gibbs sampler with the same random sequence.
