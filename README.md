# GenDRAM logic die in SystemVerilog

GenDRAM puts a logic die under a monolithic 3D (M3D) DRAM stack and uses it
for two dynamic-programming workloads that look different but share a
structure: all-pairs shortest paths (APSP, blocked Floyd-Warshall) and the
seeding and banded alignment of DNA reads. Both are "grid updates" over a
semiring. APSP relaxes `d = min(d, a + b)` (min-plus). Alignment scores
`h = max(diag + s, up + gap, left + gap)` (max-plus). One datapath, an
adder/comparator lane with a mode bit, serves both.

Each of the 32 DRAM bank-groups has its own processing unit (PU) directly
under it, joined by a 1024-bit port. The 32 PUs split into two kinds:

* 8 **Search PUs** for the memory-bound seeding step;
* 24 **Compute PUs** for the arithmetic: APSP tiles and banded alignment.

A unidirectional ring joins the PUs. A central controller switches the array
between two modes:

* a broadcast mode for APSP;
* a producer/consumer pipeline for genomics.

This repository gives synthesizable RTL for the logic die: the controller,
both PU types and everything inside them. It also has a self-checking
testbench for every block and for the whole die. The DRAM stack, the
hybrid-bonding transceivers and the host are outside the RTL. Each PU's
bank-group bus is a port of the top module, and `tb/dram_model.sv` models a
bank-group for simulation.

```
                      host: start, mode, addresses, tiering-table writes
                                        |
                              gendram_controller
                  (phases, one-hot commands, tile_mapper, drain)
                                        |
   ring stop: 0 .. 7                              8 .. 31
          +---------------+              +----------------------+
 ring --> |  search_pu    | --> ... -->  |  compute_pu          | --> back to stop 0
          |  16 search_pe |              |  16 compute_pe       |
          |  bank_ctrl    |              |  shared_memory       |
          |  tiering_tbl  |              |  combiner, max_min   |
          |  ring_switch  |              |  data_fusion_unit    |
          +-------+-------+              |  ring_switch         |
                  |                      |  bank_ctrl, tiering  |
                  |                      +----------+-----------+
           bank-group p (1024 b)             bank-group p (1024 b)
```

## The Compute PE: one row per cycle

Most of the design turns on how a Compute PE works, so it comes first.

A Compute PU owns one square tile of `B = N_PE x LANES` elements per side:
256 x 256 32-bit values by default. PE `p` holds the 16 columns
`16p .. 16p+15` of that tile. Its 32 KB buffer has two banks of 256 rows of
512 bits:

* the **C bank** holds the PE's slice of the tile being updated;
* the **B bank** holds the same slice of a tile received from another PU.

The PE takes one *row operation* per cycle through a two-stage pipeline.

**Stage 1** reads two rows:

* C row `i`;
* the B operand row `k`, from the B bank or, when the tile is its own B
  operand, from the C bank.

**Stage 2** gets one scalar `a_in` from the PU and applies the semiring on
all 16 lanes at once: `C[i][l] = min(C[i][l], a_in + B[k][l])`. It writes
C row `i` back. Stage 2 also exposes the C row it holds (`s2_crow`). The PU
uses that to pick `a_in = C[i][k]` out of its own tile when the A operand is
the tile itself.

Stage 1 can read a row that stage 2 is writing in the same cycle. For
example, row `i` can be updated on two cycles in a row, or row `k` can be
read just after it was written. A forwarding path covers this, so the
pipeline never stalls. A whole tile update is therefore `B x B` row
operations with `k` as the outer loop and `i` as the inner loop: 65,536
cycles at the default size, plus 3 cycles of pipeline and control.

For alignment the same PE runs one *band row* per cycle in max-plus mode.

* Lane `d` of row `i` is the cell at reference position `ws + i + d`. Here
  `ws = loc - LANES/2` and `loc` is the candidate location.
* The band therefore slides one position per read base.
* From the previous row, lane `d` takes two values: the diagonal (lane `d`)
  and "up" (lane `d+1`).
* The left neighbour comes from lane `d-1` of the same row, through a
  16-deep chain inside the cycle.
* Row `-1` is all zeros, with the band's top-right cell outside the band.
* The scores are +1 for a match, -1 for a mismatch and -1 for a gap.
  Parameters set them.

After the last read base, the PU's max/min engine picks the best score of the
final row.

Sums saturate at ±(2^30 − 1), which stand for ±infinity. Unreachable paths
therefore stay unreachable instead of wrapping. An Int5 mode clamps results
to [−16, 15].

## Blocked Floyd-Warshall on the ring

The host places an `m x m` grid of tiles in DRAM. Tile `(i, j)` lives in the
bank-group of Compute PU `(i*m + j) mod 24` (`tile_mapper`) at row
`tile_row`. Within a tile, row `r`, beat `b` is beat `r*8 + b` of the tile.
Each 1024-bit beat holds 32 elements. A tile is 2,048 beats, which is 64
DRAM rows of 32 beats.

For every pivot index `k`, the controller runs these phases. Each phase
issues one command per tile involved and waits until every PU reports done.

| phase | tiles | command | A operand | B operand |
|---|---|---|---|---|
| 1 pivot update | (k,k) | UPDATE | itself | itself |
| 2 pivot broadcast | (k,k) | SEND | – | – |
| 3 row/column update | (k,j), (i,k) | UPDATE | row tile: received pivot; column tile: itself | row tile: itself; column tile: received pivot |
| 4 row/column broadcast | (k,j), (i,k) | SEND, all at once | – | – |
| 5 internal update | all others | UPDATE | received (i,k) | received (k,j) |

The controller starts with a LOAD of every tile and ends with a STORE of every
tile.

**SEND.** The PU reads its tile row by row out of the PEs. The combiner cuts
each row into eight 1024-bit beats, and the beats go onto the ring as
broadcast flits.

**Receiving.** Every other PU's data fusion unit looks at the flit header,
`(tile_r, tile_c, row, beat)`, against its own tile `(ti, tj)` and the
current pivot `k`:

* a beat of tile `(ti, k)` is written into the shared memory, at word
  `row*8 + beat`, as the A operand;
* a beat of tile `(k, tj)` is written into the B banks of the two PEs that
  the beat covers;
* anything else is ignored.

The controller holds `k` on `cmd_k` for the whole super-step. A PU can
therefore catch tiles sent before it gets its own command.

**Running UPDATE.** During UPDATE the shared memory delivers word
`i*8 + k/32` one cycle after the request. The PU picks element `k mod 32` as
`a_in`. Whether A and B come from the tile itself is decided from
`tj == k` and `ti == k`, which gives the table above.

**The ring.** Each stop registers the flit once per hop. Through traffic has
priority over local injection, so an injecting PU waits (`inj_ready` low)
while the link is busy. A unicast flit leaves at its destination. A
broadcast flit is copied out at every stop and dropped by the stop just
before its source. One 1024-bit flit per cycle at 1 GHz is the 128 GB/s per
link that the published design lists.

## The genomics pipeline

**Search PE.** A Search PE seeds one read at a time. It works through five
units in order:

1. **Extractor.** Every `STRIDE` bases it takes a `K`-base seed (2 bits per
   base, little-endian) as a hash.
2. **PTR access.** It reads the 64-bit PTR word at `ptr_base + seed`. The
   word is `{count, start}`.
3. **CAL unit.** It reads up to `MAX_HITS` CAL words at
   `cal_base + start + n`. Each is a reference position, which the unit turns
   into a read start `loc = pos - s`.
4. **Sorter.** It keeps 16 distinct locations with vote counts. When the read
   is done, it emits them with the most votes first. Ties go in order of
   first sighting. It stops below `min_votes`.

Reads wait in the PE's 8 KB local memory, which holds 128 reads of up to 256
bases.

**Search PU.** The Search PU does three jobs:

* It streams read records from its bank-group into its 16 PEs in turn. A
  record is one beat per read: bits [511:0] are the bases, [527:512] the
  read id and [543:528] the length.
* It arbitrates the PEs' table lookups onto its DRAM controller, one at a
  time. Table word `w` is 64-bit word `w mod 16` of beat `w / 16`. Small
  table addresses therefore fall in the lowest DRAM rows, which are tier 0,
  the fastest.
* It packs each candidate (read id, length, location and the read's bases)
  into one 1024-bit unicast flit. It addresses these flits to the Compute
  PUs round-robin.

**Compute PU.** Candidate flits are queued (16 deep) in the Compute PU. When
the Compute PU has no command to run, it takes the next candidate:

* It fetches the two 1024-base reference beats around `loc` from row
  `ref_row` of its bank-group. The reference is stored 2 bits per base.
* It runs the banded alignment on PE 0, one base per cycle.
* It returns `(read id, loc, best score)` on `res_*`.

If a candidate arrives while the queue is full, it is dropped and counted in
`cand_drops`. The ring has no back-pressure on ejection.

**Controller.** In genomics mode the controller pulses `srch_start` and
declares the run finished after no PU has been busy for `DRAIN` cycles.

## DRAM side: tiers and the bank controller

The stack has 1024 layers grouped into 8 latency tiers. A row's tier is
`row[14:12]`, so the lowest rows are the fastest. The **tiering table**
holds one 32-bit register per tier, `{0, tRP, tRAS, tRCD}`, in 1 GHz cycles.
It resets to the published nanosecond figures rounded up:

| tier | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 |
|---|---|---|---|---|---|---|---|---|
| tRCD (ns) | 2.29 | 3.92 | 5.99 | 8.50 | 11.44 | 14.82 | 18.63 | 22.88 |
| tRCD (cycles) | 3 | 4 | 6 | 9 | 12 | 15 | 19 | 23 |
| tRAS (cycles, tRCD + 27.5 ns) | 30 | 32 | 34 | 36 | 39 | 43 | 47 | 51 |

`tRP` is 5 cycles (4.77 ns). The host can rewrite any entry through
`tt_we/tt_idx/tt_wdata`.

**Bank controller.** Each PU's `bank_ctrl` keeps rows open:

* it issues ACT, waits that tier's tRCD, then issues RD or WR;
* further requests to the open row are hits that go out one per cycle;
* a miss waits out tRAS, precharges, waits tRP and activates again.

It counts activations and hits. Timing therefore depends on where the data
sits. In the bank-controller test, a read that misses in tier 7 takes 20
cycles longer than one that misses in tier 0.

## Interfaces and formats

* **Flit header** (`flit_hdr_t` in `gendram_pkg`): kind (tile beat or
  candidate), broadcast bit, source stop, destination stop, tile row and
  column index, tile row (8 bits), beat (3 bits). The payload is 1024 bits.
* **Candidate payload** (`cand_payload_t`): the bases in [511:0], `loc`,
  `read_len` and `read_id` above them.
* **PU commands** (`pu_cmd_e`): `PC_LOAD`, `PC_UPDATE`, `PC_SEND`,
  `PC_STORE`. A command is `cmd_valid` for one cycle to an idle PU
  (`cmd_ready`). `done` pulses when it ends. STORE is posted: `done` comes
  when the last beat has been handed to the bank controller.
* **Top-level host port**: the host port of `gendram_top` carries these
  signals:
  * `host_start` with `host_mode`: 0 runs APSP, 1 runs genomics;
  * `m`, `tile_row`, `num_reads`, `read_row`, `ref_row`, `ptr_base`,
    `cal_base`, `min_votes`;
  * the outputs `host_done` (a pulse) and `host_busy`.

  Alignment results leave through `res_*`, lowest Compute PU first.
* **DRAM ports**: `dram_cmd/bank/row/col/wdata[p]` out and
  `dram_rvalid/rdata[p]` in, for ring stop `p`. Stops 0–7 are the Search
  PUs. Read data returns a fixed latency after RD; the model uses 2 cycles.
* **Statistics**: super-steps, broadcast phases, candidates sent, candidates
  dropped, activations and row hits.

## Where this RTL departs from the published design

* **Tiles per Compute PU.** Each Compute PU holds exactly one tile and the
  controller has no tile streaming, so APSP is limited to `m*m <= 24`
  (N ≤ 1,024 vertices at B = 256). The published graphs (5,242; 6,301 and
  65,536 vertices) need hundreds to tens of thousands of tiles.
* **Mapping modulus.** The tile mapping takes its modulus over the 24
  Compute PUs. The published equation uses C × G = 32, all bank-groups, and
  its figure and text disagree on which PUs the first tiles land on.
* **Shared memory size.** The shared memory is 256 KB, as in the parameter
  table. One later passage says 512 KB.
* **Alignment.** Each Compute PU aligns one candidate at a time on one PE,
  with a fixed 16-cell band and linear gaps. The adaptive band, traceback and
  the sorter drawn inside the Compute PE are not built, because their
  hardware is not described. Only the best score is returned.
* **Read and window size.** Reads are at most 256 bases. The reference
  window is 1,024 bases, so `loc` must be at least 8, and long reads (PacBio,
  ONT) do not fit.
* **Max/min engine.** Its add and subtract units are built and tested, but
  the PU's sequencer uses only the max reduction.
* **Invented details.** The seed length (12), stride (12), hit cap (8),
  sorter size (16), vote filter, table word layout and read record layout
  are choices of this design.
* **Bank count.** Each PU drives 16 banks (a 4-bit bank field), following
  the PU drawing. The organisation table would give 8 banks per bank-group.
* **Phase structure.** The controller splits "row/column update" and
  "broadcast" into separate phases with a barrier between them. It does not
  overlap them.

## Simulating

Every block has a testbench `tb/<block>_tb.sv`. Each one:

* drives random stimulus;
* compares against a model written independently in the testbench;
* prints `TB_RESULT checks=<n> failures=<n>`;
* has a watchdog.

`tb/dram_model.sv` is the bank-group model. It provides sparse storage, a
fixed read latency, and checks tRCD, tRAS, tRP and open-row rules per tier.
With plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal \
    rtl/gendram_pkg.sv $(ls rtl/*.sv | grep -v pkg) tb/dram_model.sv \
    tb/gendram_top_tb.sv --top-module gendram_top_tb
./obj_dir/Vgendram_top_tb
```

What the larger tests cover:

* `compute_pe_tb`: in-place Floyd-Warshall of a tile at one row per cycle,
  the forwarding path and banded alignment rows, each against a reference.
* `compute_pu_tb` (4 PEs, 64 x 64 tiles):
  * all four tile roles of a super-step (pivot, row, column, internal),
    with tiles injected as ring flits;
  * the flits of a SEND;
  * the update cycle count (B² + 3);
  * candidate-queue overflow and alignment scores.
* `search_pe_tb`, `search_pu_tb`: exact candidate lists against a software
  seeder over a real index of a random reference, ring injection stalls and
  round-robin destinations.
* `gendram_controller_tb`: the exact command schedule for m = 1, 2, 3, the
  phase barrier and the genomics drain.
* `gendram_top_tb` (2 + 4 PUs, 2 PEs per PU, 4-base seeds): APSP on a
  64-vertex graph against Floyd-Warshall (about 7,000 cycles), a tiering
  write, then genomics with every alignment checked. It counts super-steps,
  broadcasts, activations, row hits, candidates, alignments and the mode
  switch, and fails if any is zero. It also requires zero DRAM timing
  violations.
* `gendram_top_full_tb`: the same flow at the default size with no
  parameter overrides (8 + 24 PUs, 16 PEs, 256 x 256 tiles, 12-base seeds).
  APSP on one 256-vertex tile takes about 92,000 cycles. Verilator needs
  about 5 minutes to build this model and under a minute to run it.

Synthesis of the full top (32 PUs, 384 PEs, about 12 MB of SRAM written as
arrays) needs more memory than a 16 GB machine has. The PU-level modules
synthesize separately.
