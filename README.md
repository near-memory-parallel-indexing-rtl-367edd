# A coalescing indirect stream unit for sparse matrix-vector products

Sparse matrix-vector multiplication (SpMV) spends most of its memory traffic on the gather
`x[col_idx[k]]`: one 64-bit element per nonzero, at an address that depends on data. A DRAM
channel delivers 512-bit (64-byte) blocks, so a naive gather uses one eighth of every block
it reads and runs at a small fraction of the channel's bandwidth. But the column indices of
neighbouring nonzeros are often close, so many of the gathers that are in flight at the same
time fall into the same 64-byte block.

This RTL implements an indirect stream unit that sits next to the memory controller and does
the whole gather there. A requester asks for one *indirect burst*: "return `elem[idx[i]]` for
`i = 0 .. num-1`", given the address of the index array, the address of the element array,
the element count and the index width. The unit then does four things:

1. It reads the index array with wide, sequential bursts.
2. It turns the indices into N = 8 element addresses per clock cycle.
3. It merges all requests for the same 64-byte block, taken from a window of W = 256
   requests, into one wide read. This is the request coalescer.
4. It sends the returned elements back densely packed: eight 64-bit elements per 512-bit
   beat, in request order.

The requester sees a dense burst, as if it had read a contiguous array. On the DRAM side
every 512-bit read serves as many requests as the window could find for that block.

```
                    +----------------+   index blocks   +----------------+  N x 64 B/8   +-----------------+
 indirect burst --->| index_fetcher  |----------------->| index_splitter |-------------->|  elem_req_gen   |
 (ind_req_t)        +----------------+  (AXI ID 0)      |  N index queues|  segments     |  N addresses    |
                         | AR (ID 0)                    +----------------+               |  per cycle      |
                         v                                                               +-----------------+
                   +------------+      AR (ID 1)       +-----------------------------------+   |  N requests
 DRAM AXI4 <------>| axi_rd_mux |<---------------------|          req_coal                 |<--+
 (512-bit R)       +------------+----R (ID 1)-------->| upsizer > regulator > watcher(CSHR)|
                                                       | meta queues > resp splitter >     |
                                                       | downsizer                         |
                                                       +-----------------------------------+
                                                                     |  N elements, in order per lane
                                                                     v
                                                              +-------------+   512-bit packed beats
                                                              | elem_packer |-------------------------> requester
                                                              +-------------+
```

## Where the design comes from

The block structure, the queue depths and the coalescing mechanism follow a published
near-memory design for AXI-Pack, an AXI4 extension that packs narrow or irregular
accesses densely onto a wide bus. That design has an index fetcher, an index splitter, N
parallel index queues, an element request generator, and a request coalescer. The coalescer
is built from an upsizer, a regulator, a request watcher with one coalescer status holding
register (CSHR), meta data queues (hitmap and offsets), a response splitter and a downsizer.
Its parameters are:

| parameter | value | origin |
|---|---|---|
| index queues, depth | 256 entries of 512/N bits each | published |
| upsizer / downsizer queues, depth | 2 | published |
| hitmap queue, depth | 128 | published |
| offsets queues, depth | 2048/W (8 for W = 256) | published |
| window W | 256 | published main configuration |
| ports N | 8 | own choice (eight lanes are drawn; no number is given) |
| DRAM data width | 512 bit, 64-bit elements, 32-bit indices in the evaluation | published |
| regulator timeout, watchdog timeout | 16 cycles each | own choice |
| address width | 48 bit | own choice |
| AXI burst length of index reads | up to 16 beats, never across a 1 KiB boundary | own choice |

At the defaults the state adds up to about 27 KB. The index queues hold 16 KB, the hitmap
queue 4 KB, the element queues 4 KB, the request queues about 3 KB and the offsets queues
0.75 KB. This matches the total given for the original design.

The published text describes what each block does. It does not give the encodings, the
handshakes or most of the control details. Those are this design's own choices, and each
is marked as such below. Everything the text leaves open was chosen to be simple and safe
against deadlock, not to copy an unknown original.

## Files

| file | contents |
|---|---|
| `rtl/isu_pkg.sv` | widths and types: `ind_req_t` (indirect burst request), `ar_t`/`r_t` (AXI4 read channels with 1-bit ID), `pk_r_t` (packed beat), `erg_cmd_t` |
| `rtl/axi_pack_isu.sv` | top level |
| `rtl/index_fetcher.sv`, `rtl/index_splitter.sv`, `rtl/elem_req_gen.sv` | index path |
| `rtl/req_coal.sv` and `rtl/coal_*.sv` | request coalescer and its six parts |
| `rtl/elem_packer.sv` | packing of elements into 512-bit beats |
| `rtl/axi_rd_mux.sv` | two-way AXI4 read multiplexer |
| `rtl/sync_fifo.sv` | the FIFO used for every queue |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/dram_model.sv`, `tb/tb_mem_pkg.sv` | behavioural DRAM channel, and memory contents defined by a hash function of the address |

## Top-level interface (`axi_pack_isu`)

All channels use valid/ready handshakes with AXI4 rules: once valid is raised, the payload
is held until ready.

* **Request** (`req_i`, `req_valid_i`, `req_ready_o`). `ind_req_t` has these fields:
  * `idx_base`: byte address of the first index. It must be aligned to the index size.
  * `elem_base`: byte address of element 0.
  * `num`: element count, at least 1, 32 bit.
  * `idx_size`: `IDX8`, `IDX16`, `IDX32` or `IDX64`.

  Element `i` of the burst is the 64-bit word at `elem_base + 8*idx[i]`. Bursts are taken
  one at a time.
* **Packed response** (`r_o`, `r_valid_o`, `r_ready_i`). Beat `b` of a burst carries
  elements `8b .. 8b+7` in its 64-bit lanes 0..7. After the last element the lanes are
  zero. `last` marks the final beat of each burst.
* **DRAM port** (`ar_o`/`ar_valid_o`/`ar_ready_i`, `r_i`/`r_valid_i`/`r_ready_o`). This is
  an AXI4 read channel with 512-bit data and INCR bursts. ID 0 carries index reads and ID 1
  carries single-beat element block reads. The port needs responses in order within each
  ID. The two IDs may interleave.
* **Events.** These outputs are one cycle wide:
  * `ev_win_load_o` and `ev_win_partial_o`: a window was loaded, or a partial window was
    loaded.
  * `ev_issue_o` and `ev_wd_issue_o`: a wide element read was issued, or it was issued by
    the watchdog.
  * `ev_merged_o`: the number of requests merged in that cycle.
  * `ev_idx_stall_o`: the index fetcher is waiting for room in the index queues.

  These outputs are meant for performance counters.

Reset is active low and asynchronous (`rst_ni`). All state resets to empty.

## Index path

**Index fetcher.** When a burst is accepted, the fetcher passes a command to the element
request generator. The command holds the element base, the count, the index size and the
position of the first index inside its 64-byte block. The fetcher then reads the blocks
that hold the index array, from the first to the last. Each read is an INCR burst of at
most 16 beats. A burst never crosses a 16-block boundary and never asks for more beats than
the index queues can hold.

The fetcher keeps the index queues from overflowing with a reservation counter. A burst of
L beats is issued only when `reserved + L <= 256`. A beat's reservation is released when the
element request generator has used the beat up. The reservation therefore covers both the
data still in flight in DRAM and the data already in the queues. This is how the fetcher
"watches the usage of the index queues". The counter itself is this design's choice.

**Index splitter.** Every 512-bit block of indices is cut into N segments of 512/N bits each (64 bits at N = 8),
and segment k is pushed into index queue k. All N queues are pushed and popped together,
one block at a time. This gives N narrow queues that an SRAM implementation can build from
N small macros, while the generator can still read any index of the head block.

**Element request generator.** It walks the indices of the burst in groups of N. Lane k of
group g takes index `N*g + k`:

1. It finds the index's block.
2. It finds the index's position in that block, which depends on the index size and the
   starting offset.
3. It extracts the index through a crossbar over the N segments.
4. It zero-extends the index and emits `elem_base + 8*idx` on its own valid/ready port.

Lanes of one group can be accepted in different cycles. The next group starts only when
every lane of the current group has been accepted.

A group can straddle two index blocks. When that happens, the lanes in the head block go
first. The head block is popped once every lane that lives in it has been sent. The test
for this is "some lane in the head block is at the block's last position or is the burst's
last index, and no lane in the head block is still unsent". Popping earlier, for example
when the lane holding the block's last index is sent, would lose the indices that other
lanes have not yet sent.

With N = 8 the generator produces up to 8 requests per cycle. A block of 32-bit indices
holds 16 of them, so each block lasts two cycles. The generator also hands the burst's element count to the packer
through a two-entry queue.

## Request coalescer

This part does the real work, and its correctness rests on a few invariants. They are
stated one at a time below.

### Slots: the upsizer and the downsizer

The coalescer's window has W slots, and each slot is the head of its own 2-entry request
queue. The upsizer maps port p's i-th request into queue `p + N*(i mod W/N)`. So port p
owns queues p, p+N, p+2N, and so on, and it fills them round-robin. A port stalls only if
its next queue is full.

The downsizer is the mirror image. It has one 2-entry element queue per slot, and port p
reads its element queues in the same round-robin order.

Wide reads complete in whatever order the coalescer issues them. But each port collects
its elements in the order in which it placed the requests. No reorder buffer or sequence
number is needed. The only thing that must hold is that a slot's elements arrive in the
same order as the slot's requests. The next two sections make sure of that.

The interleaved mapping is this design's own choice. The published figure only shows each
port feeding its own group of queues.

### Windows: the regulator

The watcher does not look at the queue heads directly. It looks at a window, which is a
W-bit mask over the heads that the regulator freezes:

* While the window still has valid entries, it is held. An entry leaves the window when the
  watcher accepts it, and that acceptance pops the slot's request queue.
* When the window is empty, a new one is loaded. This happens at once if every slot has a
  request ready (a *complete* window). Otherwise it happens after 16 cycles in which no new
  request arrived (a *partial* window). The partial window is what lets the tail of a burst
  drain.

A slot can join a window only if it has *credit*. Credit means that fewer than 2 of its
accepted requests are still waiting for their element to leave the downsizer. Because of
this credit, an element queue can never be full when its response arrives. So the response
splitter never blocks, and a wide response can never wait behind an element queue that is
itself waiting for a later response. Without the credit, that cycle can deadlock the
coalescer: slot s's queue is full of elements that its port cannot consume, because the
port is waiting for an element of another slot, and that element sits in a response that
the splitter cannot take. The credit check is this design's addition.

Because a slot holds at most one request in any window, and a new window only starts once
the previous one has been fully accepted, a slot's requests are accepted in queue order.
Accepted requests go into warps whose wide reads are issued in acceptance order. Their
hitmaps leave the meta data queue in the same order, and AXI returns reads that share an
ID in order. So each slot's elements come back in request order.

### Warps: the request watcher and its CSHR

The CSHR describes one *warp*, which is a set of requests for a single 64-byte block. It
holds four fields:

* Tag: the block address, `addr[47:6]`.
* Status: IDLE (0) or VALID (1). Here IDLE means that no warp is open, and VALID means
  that the warp holds at least one request. The published description words these two
  states differently, as "coalescing in progress" and "block coalesced".
* Hitmap: W bits, one per window slot.
* Offsets: one 3-bit offset per slot, `addr[5:3]`, which selects the 64-bit word inside
  the block.

Each cycle the watcher does the following:

1. The effective tag is the CSHR's tag when the CSHR is VALID. When it is IDLE, the
   effective tag is the tag of the lowest-numbered valid window entry.
2. Every valid window entry is compared with the effective tag in parallel. An entry
   *hits* if its tag matches and its slot's hitmap bit is still clear. Hits are accepted:
   they leave the window, and their hitmap bits and offsets are written. An entry whose
   slot is already in the warp is a *miss*, even with a matching tag. The slot's earlier
   request must receive its element first, and one hitmap bit can describe only one
   element.
3. The watcher issues the warp's single-beat wide read if any window entry misses, or if
   the CSHR has been VALID for 16 cycles with an empty window (the watchdog). The issue
   happens in the same cycle as that cycle's hits. The read, the hitmap and the offsets are
   pushed together, and the push waits for room in the meta data queues.
4. After the issue the CSHR is IDLE again. The next warp's tag is therefore the
   lowest-numbered miss that is left.

A warp can be formed and issued every cycle. With W = 256 and good locality one wide read
serves up to 256 requests, which is the best case, when they all hit one block.

Here is an example with 9-bit addresses: a 3-bit tag, a 3-bit offset and 3 zero bits. The
window holds sixteen requests with the tags

```
slot:  0   1   2   3   4   5   6   7   8   9   10  11  12  13  14  15
tag : 110 110 100 101 001 110 110 110 111 110 101 110 110 110 110 110
```

The watcher forms five warps, one per cycle if the AR channel is ready:

1. Tag 110 takes eleven slots, and it is issued at once because other entries miss.
2. Tag 100 takes slot 2.
3. Tag 101 takes slots 3 and 10.
4. Tag 001 takes slot 4.
5. Tag 111 takes slot 8. Nothing else is left to miss, so this warp is issued by the
   watchdog, 16 cycles after the window has emptied.

`tb_coal_req_watcher` replays this example and checks each warp's tag, hitmap and offsets.

The published example figure leaves three requests with tag 110 out of the first warp and
does not say why. Here every matching request whose slot is free is merged.

### Meta data queues and the response splitter

Every issued read pushes its W-bit hitmap into the 128-entry hitmap queue. Each slot whose
hitmap bit is set pushes its offset into that slot's own offsets queue, which is 8 entries
deep at W = 256. The meta data queues accept a push only when the hitmap queue and every
offsets queue have room. This keeps the push condition stable while the AXI request waits.

When a wide response arrives, it belongs to the oldest hitmap. For every set bit, the
splitter extracts the 64-bit word that the slot's offset names and pushes it into the
slot's element queue. It pops the hitmap and those offsets in the same cycle. This is one
response per cycle, handled entirely in combinational logic.

### Element packer

The packer takes the burst's element count from its command queue. It then collects groups
of N elements, all lanes of a group at once, and writes them into consecutive 64-bit lanes
of a beat register. The beat is sent when its eight lanes are full, or at the end of the
burst with the unused lanes set to zero and `last` set. With N = 8 the packer sends one full
beat per cycle. With N = 4 it needs two groups per beat. N must divide 8.

### AXI read multiplexer

Index reads (port 0) and element reads (port 1) share the DRAM port. When both request at
once, they alternate. An AR that has been presented stays selected until it is accepted.
The multiplexer writes the port number into the AXI ID, and responses are steered back by
that ID.

## Verification

Every module has a self-checking testbench. Each testbench prints
`TB_RESULT checks=<n> failures=<n>` and includes a watchdog. Most testbenches override
parameters to keep the state small (for example W = 8 or 16, or N = 2 or 4). The
end-to-end test runs at the default parameters.

| testbench | what it establishes |
|---|---|
| `tb_sync_fifo` | FIFO contents, flags and fill level against a queue model under random traffic |
| `tb_index_fetcher` | burst addresses and lengths for all index sizes and unaligned starts; reservation limit (IDX_DEPTH = 8) |
| `tb_index_splitter` | segment contents and lockstep flags |
| `tb_elem_req_gen` | every element address against `elem_base + 8*idx`, for all index sizes and block-straddling groups; rate of N requests per cycle |
| `tb_coal_upsizer`, `tb_coal_downsizer` | slot mapping; each port's order survives out-of-order filling |
| `tb_coal_regulator` | complete and partial windows, the time limit, credits |
| `tb_coal_req_watcher` | the example above, AR back-pressure, watchdog delay, a repeated slot forcing a new warp; 300 random windows, where every warp must be exactly the requests accepted since the previous issue, all of one block |
| `tb_coal_meta_queues`, `tb_coal_resp_splitter` | queue model with both fullness limits; element extraction rule |
| `tb_req_coal` | whole coalescer (N = 4, W = 16) against the DRAM model: every element correct and in order; fewer DRAM beats than requests |
| `tb_elem_packer` | beat contents, zero fill and `last` for random burst lengths |
| `tb_axi_rd_mux` | arbitration, AR stability, routing by ID |
| `tb_axi_pack_isu` | the whole unit at N = 8, W = 256 against the DRAM model with random stalls on both sides |
| `tb_spmv_workload` | the SpMV gather of two generated matrices at the default parameters, one burst per 32-row slice: every element is checked, and the run must reach a minimum number of useful elements per wide read |

The end-to-end test compares every packed beat with the expected elements. It also counts
each of these mechanisms and fails if any of them never occurred:

* complete windows and partial windows;
* issues forced by a miss and issues forced by the watchdog;
* warps with more than one request;
* index-queue back-pressure;
* DRAM stalls and requester stalls.

In a typical run it sees about 23 complete and 5 partial windows, about 4000 issues forced
by a miss and 7 by the watchdog, and 6565 merged requests. Over the whole run, DRAM delivers
about 0.2 useful elements per 64-bit word it reads. The test mixes bursts with little reuse
on purpose. One burst of 5000 elements took 4847 cycles, which is about one element per
cycle. This run used the behavioural DRAM model with random stalls, so these figures are
not a performance claim.

`tb_spmv_workload` uses two generated matrices, each with 32-bit indices:

* The first is the 27-point stencil matrix of HPCG on a 12x12x12 mesh. Rows are in natural
  order, and entries that fall outside the mesh are clamped onto it. The run gathers 46,656
  elements in about 10,300 cycles, which is 4.5 elements per cycle. DRAM returns about 16.6
  useful elements for each wide element read, and index reads take about half of the DRAM
  beats.
* The second is a banded random matrix with 16 entries per row spread over 2048 columns. It
  gets about 1.85 elements per cycle and 2.1 useful elements per wide read.

In both runs the DRAM model answers after 40 cycles and never stalls. Real matrices fall
between these two cases. To change the sizes, edit `grid`, `band` and the burst length in
the testbench.

To run a testbench with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/isu_pkg.sv tb/tb_mem_pkg.sv \
          tb/tb_axi_pack_isu.sv --top-module tb_axi_pack_isu -Mdir obj_top
obj_top/Vtb_axi_pack_isu
```

Testbenches that do not use the memory model can leave out `tb/tb_mem_pkg.sv`. Verilator
finds the other modules through `-I`.

`tb/dram_model.sv` is a behavioural model, not synthesizable. It answers in order, after a
fixed latency of 20 cycles by default, one beat per cycle. It can stall either channel at
random. It does not model DRAM timing, and it does not model the FR-FCFS scheduling of a
real HBM2 controller.

## Departures and limits

* **Sizes.** Every published number (N index queues of 256, W = 256, depths 2, 128 and
  2048/W) is the default. Nothing was scaled down.
* **Own choices where the text is silent.** These were all chosen here:
  * N = 8;
  * the request encoding;
  * all handshakes;
  * the reservation counter of the fetcher;
  * lockstep popping of the index queues;
  * the crossbar extraction;
  * the interleaved slot mapping;
  * the regulator timeout and the per-slot credit;
  * the exact CSHR state encoding and same-cycle issue;
  * the watchdog time;
  * the element count queue to the packer;
  * the read multiplexer.
* **One burst at a time.** The fetcher accepts a new indirect burst only once it has issued
  all index reads of the current one. Later stages overlap bursts.
* **Index alignment.** The index array must be aligned to the index size, and `num` must be
  at least 1.
* **Not included.** The following parts are not part of this RTL. The top level exposes
  plain AXI-style ports where they would connect.
  * The vector processor and application core that use the unit.
  * The L2 memory and the prefetcher that issue the bursts.
  * The non-indirect (contiguous and strided) AXI-Pack paths of the adapter.
  * The HBM2 controller.
  * SRAM macros. All queues are register arrays, which a flow can map to macros.
* **Comparison variants.** The published evaluation also compares a unit without a
  coalescer and a coalescer fed through one serial port. These variants are not provided.
  The window size is a parameter. As in the published design, N and W must be powers of two
  with W >= N, and W <= 2048 so that the offsets queues keep at least one entry.
