# SearSSD: graph-traversal nearest-neighbour search inside an SSD

Graph-based approximate nearest-neighbour search (HNSW, DiskANN and similar) spends most of its
time on two things. It walks a proximity graph, and it computes distances between a query and
the feature vectors of the graph's vertices. For billion-vector data sets, the graph and vectors
live on flash. Moving every visited vector over PCIe to a CPU or GPU then becomes the bottleneck.

SearSSD moves the distance computation into the flash chips. Each LUN, the unit of a flash chip
that can work independently, gets a small accelerator behind its page buffers. The accelerator
senses a page, corrects it with a hard-decision LDPC decoder and runs it through multiply-add
trees against the query. Only `{query, vertex, distance}` leaves the chip. The SSD controller
keeps the graph walk. Its part in hardware is:

- **Vgenerator**: turns the current entry vertex of every query into its neighbour list.
- **Allocator**: groups those (query, neighbour) pairs by LUN and turns them into
  `<Search Page>` commands.

A batch of queries is searched one iteration, one hop of the graph walk, at a time. All 256 LUNs
work in parallel on pairs from all queries of the batch.

This repository holds synthesizable SystemVerilog for everything in SearSSD that has logic.
Three parts are outside it and appear only as ports or testbench models:

- the embedded cores and firmware, which pick the next entry vertices and decide termination;
- the DRAM;
- the NAND arrays.

## Organisation and sizes

| Level | Count | Contents |
|---|---|---|
| SSD | 1 | Vgenerator (2 MB Vgen Buffer), Allocator (6 MB Alloc Buffer), 32 channels |
| channel | 32 | one Flash CTR, 4 SiN chips |
| SiN chip | 128 | 2 LUN accelerators |
| LUN accelerator | 256 | 24 KB query queue, 3 KB Vaddr queue, 2 planes |
| plane | 512 | page buffer, 2 LDPC decoders, MAC group of 2 MACs, 1 KB output buffer |

The flash geometry follows the paper: 512 GB total, 512 blocks per plane, 128 pages of 16 KB
per block. The datapath works on 64-bit words (eight signed 8-bit feature elements). A 16 KB page
is 2048 words. The clock target in the paper is 800 MHz.

All shared widths, structs and constants are in `rtl/ndsearch_pkg.sv`.

## One iteration, end to end

1. The controller writes the query vectors into the Vgen Buffer (`qw_*`). It writes each query's
   entry vertex into the query property table in DRAM, then pulses `start`.
2. **Vgenerator** reads the table and the LUNCSR arrays. It produces one `(Q_id, N_id, L_id)`
   entry per neighbour into its NBR buffer and hands the entries to the Allocator.
3. **Allocator** appends each entry to the Alloc Buffer partition of its LUN. It then drains the
   partitions round robin. For each entry it:
   - sends the query vector to the LUN once;
   - fetches the block number from the BLK array;
   - forms the row and column address;
   - sends a 36-bit `<Search Page>` task to the channel's Flash CTR.
4. **Flash CTR** forwards words to its four SiN chips over the channel bus. It also reads finished
   results out of the accelerators' output buffers.
5. **LUN accelerator** queues tasks per plane and senses pages, pairing work on a page where it
   can. It decodes and streams the vector and the query into a MAC, then stores the result.
6. Results leave the top on `res_*`, one per cycle, taking the channels in turn.
   `alloc_done`, `vgen_done` and `search_idle` tell the controller when the iteration is over.
   The controller then gathers results, picks the next entry vertices and pulses `spec_stop`.

## LUNCSR and vertex placement

The graph is stored as compressed sparse rows with two extra arrays. All arrays hold 32-bit
words at word addresses `base + index`:

| Array | Contents |
|---|---|
| `offset[v]` | start of vertex `v`'s list; the list runs from `offset[v]` to `offset[v+1]` |
| `neighbor[i]` | vertex IDs |
| `LUN[v]` | the LUN that stores vertex `v` |
| `BLK[v]` | the block that stores vertex `v` |

LUN and block come from these arrays because the flash translation layer may move a block. The
rest of the address follows from the vertex index. With `fv_dim = d`, a vector is `8 << d`
elements, which is `1 << d` words. A page holds `vpp = 2048 >> d` vectors. For `p = vid / vpp`:

- plane = `p % 2`
- page = `(p / 512) % 128`
- column (word) = `(vid % vpp) << d`

Consecutive pages fill plane 0, then the same page of plane 1, then move on across the LUNs.
This is the layout the paper's reordering aims at: neighbours land on the same page, or on the
same page number in the two planes.

The 36-bit `<Search Page>` task has these fields:

| Field | Bits |
|---|---|
| distance | 2 |
| row address | 26 (LUN 9 / plane 1 / block 9 / page 7) |
| fv_dim | 3 |
| fv_prec | 4 |
| pageLocBit | 1 |

The design adds the query-queue slot, query ID, vertex ID and a speculative flag to the task.

Distance codes:

| Code | Distance | Computed as |
|---|---|---|
| 0 | squared L2 | sum of squared differences |
| 1 | angular | negated dot product (vectors assumed pre-normalised) |
| 2 | inner product | negated dot product |
| 3 | L1 | sum of absolute differences |

## Vgenerator

The Vgen Buffer is split into three portions:

| Portion | Size | Contents |
|---|---|---|
| Query | 1 MB | the batch's vectors, word `(qid << fv_dim) + widx` |
| NBR | 512 KB | the iteration's entries |
| Pref | `N_QMAX` rows | `PREF_K` prefetched vertices per query, plus an iteration tag |

Four fetch units run as a pipeline joined by small FIFOs. They share one DRAM port under a
fixed-priority arbiter; responses come back in request order and are routed by a tag FIFO.

| Unit | Reads |
|---|---|
| QP Reader | the entry vertex of each query (all-ones marks a finished query) |
| OFS Fetcher | `offset[v]` and `offset[v+1]` |
| NBR Fetcher | each neighbour ID |
| LUN Fetcher | each neighbour's LUN |

The Vgen CTR forwards the NBR entries to the Allocator. It drops an entry whose vertex is in the
query's Pref row from the previous iteration, because that distance has already been computed
(`spec_hits`).

### Speculative searching (Pref Unit)

While the controller is still gathering the results of iteration *i*, the Pref Unit guesses part
of iteration *i+1*. For each query it reads the neighbour lists of the first-order neighbours. It
counts how often each second-order neighbour appears, in a table of `CAND` entries. It keeps the
`PREF_K` most frequent ones that are not already first-order neighbours, looks up their LUNs and
sends them to the Allocator marked speculative. The accepted ones are written into the Pref row
with the iteration number.

`spec_stop` ends the speculative work at once, which is the forced stop of the paper. Queries
that were not finished keep an old tag and simply count as not prefetched.

## Allocator

The 6 MB Alloc Buffer is split into 256 circular partitions, one per LUN. The Dispatcher writes
one entry per cycle. It stalls only when the target partition is full.

The Alloc CTR drains one partition at a time and keeps a per-LUN table of the query slots in use.
A query's vector is sent before its first task in the run. If a LUN's 24 KB query queue would
overflow, the CTR waits for that LUN to go idle, then restarts slot numbering. That is 24 vectors
at 1024 dimensions, more at smaller sizes.

`pageLocBit` is set when the next entry of the same partition is on the same page, using
one-entry look-ahead. It tells the accelerator that it can compute two distances from one sense.

## Flash CTR and SiN

The Flash CTR handles one channel. Each cycle the shared bus carries either a command word to one
SiN chip or a read-back. A command word is a query word or a task.

Read-back follows the multi-LUN search sequence. The CTR selects a LUN's output buffer, the step
that takes the place of *Read Status Enhanced*. It then streams that buffer's entries, the step
that takes the place of *Change Read Column* and the data transfer. It serves output buffers
round robin, reading only those with entries.

The CTR also shows the Allocator which LUNs are busy, for the overflow wait. The SiN chip steers
commands and read-back to one of its two LUN accelerators.

## LUN accelerator

This block is the most involved. Per plane it keeps a FIFO of tasks, a page-buffer tag (which row
the buffer holds) and a two-lane read engine. The Acc CTR chooses per plane:

- **Pair:** a task with `pageLocBit` whose successor is on the same page runs together with it.
  The two MACs compute both distances from two column streams of one sensed page.
- **Hit:** if the page buffer already holds the page, no sense is needed.
- **Sense:** otherwise the plane asks for a sense. The LUN's array does one sense at a time. If
  both planes need a page with the same page number, the two senses are issued together as a
  multi-plane operation.
- **Hold:** a plane holds back a lone sense in two cases, so that the two senses can merge:
  - for one cycle, when the other plane is idle and empty and is just receiving a task for the
    same page number;
  - while the other plane is still streaming, if the task behind that stream also misses on the
    same page number. The wait ends when the stream does.

  Once merged, the two planes run in step, so later senses tend to merge too.

Streaming reads one 78-bit codeword per lane per cycle. Each codeword passes through the lane's
LDPC decoder (1 cycle) and meets the matching query word read from the query queue. The MAC's
result goes into the plane's 1 KB output buffer. A task is not started unless there is room for
its result.

The NAND ports are:

- `sense_req` / `sense_row` / `sense_done` per plane;
- `rd_req` / `rd_col` answered by `rd_vld` / `rd_cw` per lane, in order, with any latency.

## MAC group

Each MAC takes one 64-bit word (eight elements) per cycle. It forms eight products, squared
differences or absolute differences, and sums them in a three-level adder tree. It accumulates
over the vector. The distance is valid one cycle after the last word. The distance type is
latched at the first word, so the two MACs of a group can compute different distances.

## LDPC hard-decision decoder

The code is this design's own, because the paper does not give one. It is a cycle code on the
complete graph with 13 vertices:

- Each of the 78 edges is a codeword bit.
- Each of the 13 vertices is a parity check over its 12 edges.
- The 66 edges not touching check 0 carry data: bits 0-63 plus 2 pad bits, in the order
  (1,2), (1,3), ... (11,12).
- The 12 edges to check 0 are parity.

A single flipped bit makes exactly the two checks at its ends fail, so the decoder flips the bit
where those two checks meet. Any other non-zero syndrome is reported as `out_fail`. In hardware
that is one XOR tree per check and one AND per bit, with the result registered (1 cycle).

The minimum distance is 3:

- single errors are always corrected;
- double errors on disjoint edges are detected;
- double errors sharing a check are miscorrected.

A word that fails still produces a distance, but the result carries `ecc_fail`. The controller
is expected to re-read that page with soft decoding.

## Departures from the paper and open points

- The LDPC code, the word width, the 8-bit element format and the `fv_dim` / distance encodings
  are this design's choices. The paper gives the field widths only. `fv_prec` is carried but not
  used: only 8-bit elements are computed.
- The Vgen Buffer split (1 MB / 512 KB / Pref rows) is not in the paper. `N_QMAX = 2048` and
  `QID_W = 11` hold batches of up to 2048 queries. Larger batches (the paper goes to 8192) must
  be split, or need both widened.
- The Pref Unit's table sizes (`R_MAX`, `CAND` = 32, `PREF_K` = 8) and its tie rule are not in
  the paper. Only the rule "most connections to the first-order neighbours" is.
- The query queue overflow policy, the round-robin orders and the bus and DRAM handshakes
  (32-bit DRAM words, in-order responses) are not in the paper.
- Multi-plane merging requires the same page number on the two planes of a LUN and allows
  different blocks. This is the addressing rule the paper states for multi-plane sequences
  (distinct planes, same page and LUN). Real flash parts may add further restrictions.
- The FTL, the termination and Apply/Gathering steps, the FPGA bitonic sorter and PCIe are not
  part of this RTL. The static vertex reordering is done offline and shows up only as the
  LUN/BLK arrays and the placement formula.

## Simulating

Each block has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M`. The shared package must come first:

```
verilator --binary --timing -Irtl -Itb rtl/ndsearch_pkg.sv tb/ndsearch_tb_pkg.sv rtl/*.sv \
    tb/<helpers>.sv tb/tb_lun_acc.sv --top-module tb_lun_acc
./obj_dir/Vtb_lun_acc +verilator+rand+reset+2
```

| Testbench | What it covers |
|---|---|
| `tb_ldpc_bf_decoder` | clean words, every single-bit error, disjoint double errors, 1-cycle latency |
| `tb_mac_group` | random vectors for all four distances on both MACs, result timing |
| `tb_lun_acc` | two plane models with injected errors; pairs, hits, multi-plane senses, ECC failures |
| `tb_sin` | steering of commands and read-back |
| `tb_flash_ctr` | a channel with four SiN chips and 16 plane models, with backpressure |
| `tb_allocator` | grouping, address formation, pageLocBit, query-queue overflow |
| `tb_vgenerator` | fetch pipeline against a reference walk, speculative hits, forced stop within 20 cycles |
| `tb_pref_unit` | top-`PREF_K` selection against a reference count, Pref row writes, stop |
| `tb_searssd_top` | full-size end-to-end run, described below |

Helper models in `tb/`:

- `nand_plane_model`: one plane with page buffer and error injection;
- `nand_array_model`: all 512 planes in one module, to keep the simulator's build small;
- `ndsearch_tb_pkg`: reference functions for the address formula, the code and the distances.

`tb_searssd_top` runs the top at its full default size (32 channels, 512 planes):

- Graph: 256 vertices of degree 6 spread over eight channels; 64 queries of 1024-dimension
  vectors.
- Iterations: three, the first and last with speculation.
- Models: DRAM with random stalls, and result backpressure.
- Checks: every distance against a reference. Every non-speculative pair must be either computed
  or a speculative hit.
- Mechanisms that must each happen at least once: page hits, paired tasks, multi-plane senses,
  ECC corrections and failures, speculative dispatch and hits, forced stop, query-queue overflow,
  and both kinds of backpressure.

Building it with verilator takes several minutes because of the 128 SiN instances. The run takes
about 5 minutes.
