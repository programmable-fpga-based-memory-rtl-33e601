# A programmable memory controller for FPGA accelerators

An accelerator's processing elements (PEs) make two very different kinds of
memory access. Some touch a single word here and there, often again soon after:
graph adjacency lists or convolution kernels. Others stream kilobytes in one go:
feature vectors or input planes. A single DRAM interface serves both poorly. Small
scattered accesses pay a full DRAM latency each time. Long streams waste bandwidth
when they arrive as separate word requests. And whatever the mix, the DRAM
punishes every switch from one open row to another.

This controller sits between the PEs and a DDR4 memory interface and handles the
two kinds separately:

* **Cache-line transfers** (single 64-bit words) go through a set-associative,
  write-back **cache engine**. Reuse is then served from on-chip RAM.
* **Bulk transfers** (up to 16 KB per buffer) go through a **DMA engine**. Several
  DMAs each collect a whole transfer, then issue it to memory as back-to-back
  512-bit line requests.

Both engines emit 512-bit line requests. A **path selector** merges them:
the cache wins a tie, but a DMA transfer that has started keeps the path until
its last line. A **memory scheduler** then collects the line requests into
batches and sorts each batch by DRAM bank and row. Requests to the same row leave
together, so the DRAM sees more row hits. Responses from both engines are merged
back onto one PE response port by a **forwarding unit**.

Inside the controller, requests travel as FLITs (flow-control units): a header
(PE id, access type, sizes, address, first/last framing) on one bus and the 64-bit
payload on another.

```
 PEs ──req──► flit_generator ─┬─► cache_engine ───────────────┐           ┌─► dram_req (to DDR4 interface)
                              │   (cache, miss buffer,        ├► path ──► memory_scheduler
                              │    output buffer)             │  selector  (batch, sort, FIFO, bypass)
                              └─► dma_engine ─────────────────┘     ▲
                                  (request mapper, 4 × buffer       │ dram_rsp (read lines, tagged)
                                   controller, DMA selector,  ◄─────┘
                                   mem-to-DMA forward, output buffer)
 PEs ◄──rsp── forwarding_unit ◄── cache output buffer / DMA output buffer
```

## Widths and the address map

| Quantity | Value | Where set |
|---|---|---|
| DRAM interface data | 512 bits (one line, 64 B) | `mc_pkg::MEM_DATA_W` |
| DRAM interface address | 31 bits, counting 8-byte bus words | `mc_pkg::MEM_ADDR_W` |
| PE data | 64 bits | `mc_pkg::APP_DATA_W` |
| PE address | 34-bit byte address (16 GiB) | `mc_pkg::APP_ADDR_W` |
| PEs | 4 | `mc_pkg::NUM_PE` |
| Largest transfer size field | 19 bits (256 KB) | `mc_pkg::TOTAL_SIZE_W` |

A PE byte address `a` maps to the line address `{a[33:6], 3'b000}` in DRAM words.
The DRAM word address is split as follows:

* `[9:0]`: column.
* `[13:10]`: bank group and bank.
* `[30:14]`: row.

The scheduler sorts on `{bank, row}`. This split is a choice of this design. It
should be changed to match the memory part actually used.

## Request port and FLITs (`flit_generator`)

A request carries `{pe_id, acc, payload_size, total_size, addr}` plus a 64-bit
payload, with a valid/ready handshake. `acc` takes one of four values:

* cache read
* cache write
* DMA read
* DMA write

The generator's behaviour depends on the request kind:

* A cache access, or a DMA read, becomes one FLIT with `first = last = 1`. A DMA
  read needs only its start address and total size.
* A DMA write arrives as a sequence of 8-byte requests from one PE. The generator
  keeps a count of remaining bytes per PE. It marks the FLIT that opens the
  transfer `first` and the one that completes it `last`. Writes from different
  PEs may be interleaved freely.

FLITs are registered once and then steered by the top bit of `acc` to one of the
two engines.

## The cache engine

`cache` has a Tag RAM and a Data RAM per way, with synchronous reads, and true-LRU
age counters. It runs two pipelines over the same RAMs.

* **PE pipeline (4 stages).**
  1. Tag access: read the tags and valid bits of the set.
  2. Tag compare: produce HIT and the way.
  3. Data access: read every way's line, update the LRU and write a hit word.
  4. Data select: pick the word and send the response.

  A read hit returns its word three clock edges after the edge that accepted
  the request.
* **MEM pipeline (3 stages).**
  1. LRU access: choose the victim (an invalid way, or else the oldest) and read
     its tag and line.
  2. Tag/data update: install the returned line, merging a missed write into it;
     send a dirty victim out as a write-back; answer the missed request.
  3. BRAM operation: re-read the tags of the request waiting at the pipeline's
     head; unblock.

The rule that keeps the two pipelines from colliding is `Stage EN = peEN & ~memEN`:
the memory pipeline always wins. The cache is **blocking**. A miss leaving the
tag-compare stage freezes the first two PE stages until the MEM pipeline has
installed the line; hits already in stages 3–4 drain first. A fill starts only
when PE stage 3 is empty, so responses leave in request order. Writes allocate
(the line is fetched, then merged) and write back on eviction.

`cache_miss_buffer` holds the one outstanding miss. It issues the line read, and
returns the line to the MEM pipeline. Write-backs wait in a 4-entry FIFO and
always go to memory before the line read. A read can therefore never overtake a
write to the same line.

`cache_output_buffer` is a 16-entry FIFO. When it has 4 or fewer free entries it
raises `almost_full`, which stalls the pipeline. That margin covers the responses
already in flight.

## The DMA engine

A bulk transfer is handled by one of `NUM_DMA` (4) **buffer controllers**. Each
has:

* status registers: occupied, owner PE, direction, sizes and progress;
* a 16 KB data buffer organised as 512-bit lines;
* an address buffer holding one entry per line.

The other parts of the engine:

* `dma_request_mapper` sends a FLIT marked `first` to the lowest-numbered free
  controller and records the PE id there. Any later FLIT from that PE goes to the
  same controller. If no controller is free, the FLIT waits and `no_free` is
  raised.
* `dma_buffer_controller` behaves differently for writes and reads:
  * **Writes.** The controller gathers all the FLITs first, since memory is
    touched only after the `last` FLIT. Each payload word is written into its
    slot of the line buffer. The FLIT that opens a line supplies that line's
    address. The lines are then written one per accepted cycle. One
    acknowledge word goes back to the PE.
  * **Reads.** The controller issues reads to consecutive line addresses.
    Lines may come back in any order; each is stored by the line index carried
    in its tag. Once all lines are in, it streams 64-bit words to the PE and
    flags the final one `last`.

  Width conversion between 64-bit words and 512-bit lines happens in the data
  buffer.
* `dma_selector` chooses between the controllers' request streams round-robin.
  Once a controller is chosen, it stays chosen until that transfer's last line
  request. The path selector therefore sees each transfer as one unbroken
  `first`…`last` burst.
* `mem_to_dma_forward` routes each returned line by its tag,
  `{is_dma, dma_id, line}`, to the controller that asked for it.
* `dma_output_buffer` merges the controllers' word streams into a 16-entry FIFO,
  one whole transfer at a time.

## Path selector

Line requests from the cache miss buffer and from the DMA selector meet here.

* A tie goes to the cache, because a cache access is short.
* Once a DMA transfer's first line request has been accepted, the path is locked
  to the DMA until its `last` request. During that time the cache is stalled.

Read responses from memory come back through the same block. The tag's `is_dma`
bit sends each one to the cache miss buffer or to the DMA engine.

## Memory scheduler

The scheduler is the part of the design with the most timing subtlety.

**Batch formation.** There are two input buffers of `BATCH` (32) entries, used as
a double buffer. While one batch is being sorted and drained, the next one fills.
A timeout counter starts with the first request of a batch. A batch closes when:

* the buffer is full;
* the counter reaches `TIMEOUT` (40 cycles); or
* a request of the other type arrives (read versus write).

The last rule means a batch never mixes reads and writes. Each stored request is
tagged with its position in the buffer, its *read pointer*.

**Sorting.** A closed batch goes through three steps:

1. A serial-to-parallel stage loads the keys `{bank, row, read pointer}` into a
   pipelined bitonic network (`bitonic_sorter`). The network has
   log₂N·(log₂N+1)/2 compare layers, 15 for N = 32, with one register per layer.
2. The sorted pointers enter a parallel-to-serial stage.
3. That stage reads the complete requests back out of the input buffer, in row
   order, into the output FIFO.

The read pointer is the low part of the key, which makes the sort stable: requests
to the same row keep their arrival order. Unused slots of a partly filled batch
get an all-ones key, so they sort to the end and are skipped. Requests leave the
FIFO whenever the DRAM interface is ready.

**Latency.** Take a batch of 32 back-to-back requests. Its first request reaches
the output N + 15 + 2 = 49 cycles after it arrived:

* 32 cycles to fill the batch;
* 15 cycles of sorting;
* 2 cycles for the conversions into and out of the network.

The scheduler's testbench checks this number.

**Bypass.** When the `sched_bypass` input is high, requests go straight into the
output FIFO. Use it for sequential streams or light traffic, where batching only
adds latency. With the parameter `ENABLE_SCHED = 0`, the top has no scheduler at
all.

## Forwarding unit

The forwarding unit merges the two output buffers onto the PE response port, with
one register stage.

* Cache responses go first.
* A DMA read stream, once started, is not broken until its `last` word.

Each response carries:

* `pe_id`;
* `from_dma`;
* `is_write`, which marks a write acknowledge;
* `last`;
* the 64-bit data.

## Using it

**Ordering rules:**

* Responses for cache accesses come back in request order.
* Each DMA transfer's words come back contiguously.
* There is no coherence between the two engines: a region written by DMA must
  not be held in the cache, and the reverse.
* A DMA write is issued as whole 64-byte lines, so a transfer should cover whole
  lines.

**Top-level parameters:**

| Parameter | Default | Meaning |
|---|---|---|
| `NUM_LINES`, `WAYS` | 4096, 4 | cache size (256 KB) |
| `NUM_DMA`, `BUF_BYTES` | 4, 16384 | DMA buffers |
| `BATCH`, `TIMEOUT` | 32, 40 | scheduler batch size and timeout |
| `ENABLE_SCHED` | 1 | build the scheduler |

`BATCH`, `NUM_LINES` and `WAYS` must be powers of two.

**DRAM interface:**

* `dram_req_valid/ready/req` carries `{we, addr, tag, wdata}`.
* `dram_rsp_valid/rsp` carries `{tag, rdata}`.

The memory side must return each read's tag unchanged. It may reorder reads.

## Where this departs from the source design

* Only the 64-bit PE interface width is built. Changing `APP_DATA_W` in `mc_pkg`
  is the way to get others; only 64 bits has been simulated.
* The Enable Cacheline and Enable DMA options are not built, and both engines are
  always present. Only the scheduler can be removed.
* The DDR4 memory interface IP and the DRAM itself are outside the design. Their
  user-side signals are the top's `dram_*` ports.
* The original leaves open the points below. Each is a choice made here:
  * a blocking cache with true LRU;
  * the 4-entry write-back queue and 16-entry output queues;
  * how DMAs are allocated and arbitrated;
  * the tag format;
  * closing a batch on a change of request type;
  * the timeout value;
  * the bank/row address split;
  * that DMA reads are streamed out only after all their lines have returned.
* Conflicting descriptions of the CNN workload exist. In one, kernel weights are
  read through the cache and input planes by DMA. In the other, image data goes
  through the cache and weights by DMA. The controller supports either mapping.

## How the workloads fit

All sizes below are for the default parameters.

**GCN inference.** 1.6 M vertices, 240 M edges, 1024 features per vertex.

* With 4-byte features, a feature vector is 4 KB, well inside one 16 KB DMA
  buffer; four are fetched at once.
* An adjacency list of up to 512 B is 64 cache accesses over 8 lines of a
  4096-line cache.
* The whole data set (about 7.5 GB) fits the 16 GiB address space.

**CNN, ResNet input layer.** 227×227 images.

* One 8-bit channel plane is 51.5 KB. By DMA that is 4 transfers; through the
  cache, three planes (155 KB) fit in 256 KB.
* A 7×7 kernel of 4-byte weights is 196 B.

**Sequential read of 16 KB.** By DMA this is exactly one buffer, 256 line reads.
Through the cache it is 2048 word accesses with 256 misses.

## Verification

Each block has a self-checking testbench in `tb/`. Every testbench:

* compares against a model written inside the testbench;
* stops itself with a watchdog;
* ends by printing `TB_RESULT checks=<n> failures=<n>`.

| Testbench | What it establishes |
|---|---|
| `tb_flit_generator` | routing by access type; first/last of interleaved DMA writes from several PEs |
| `tb_cache` | random traffic on a small cache (16 lines, 2 ways) against a reference memory; hit latency; write-backs of dirty victims |
| `tb_cache_miss_buffer` | one line read per miss; write-backs first, in order; fill hand-off |
| `tb_cache_output_buffer` | FIFO order; `almost_full` at DEPTH − MARGIN; no overflow |
| `tb_cache_engine` | the three cache blocks together under heavy back-pressure; misses and write-backs |
| `tb_dma_request_mapper` | first FLIT to lowest free DMA; later FLITs follow the PE; `no_free` |
| `tb_dma_buffer_controller` | write collection, address buffer, out-of-order read returns, streaming, acknowledge |
| `tb_dma_selector`, `tb_dma_output_buffer` | round robin without splitting a transfer |
| `tb_mem_to_dma_forward` | steering by tag |
| `tb_dma_engine` | four interleaved transfers, a fifth waiting for a free DMA, read-back |
| `tb_path_selector` | cache priority; DMA lock until last; response routing |
| `tb_bitonic_sorter` | sorted output of random batches at one batch per cycle; latency of 15 |
| `tb_memory_scheduler` | batch closing by full, timeout and type; row grouping; the 49-cycle latency; bypass |
| `tb_forwarding_unit` | cache priority; DMA streams kept whole |
| `tb_mem_controller` | whole controller at default parameters (see below) |

`tb_mem_controller` runs the top with no parameter overrides. `tb/dram_model.sv`
stands in for the DDR4 interface. It is an open-row model in which a row hit,
a first access and a row conflict cost different numbers of cycles. The test
covers:

* mixed cache and DMA traffic from four PEs;
* dirty evictions;
* four concurrent DMAs plus a fifth that has to wait;
* a full 16 KB DMA read;
* the path lock;
* the three ways a batch closes;
* the bypass mode.

It counts each of these mechanisms and fails if one never occurs.

To run a testbench with Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -y rtl -y tb rtl/mc_pkg.sv tb/tb_pkg.sv \
          tb/tb_mem_controller.sv --top-module tb_mem_controller
./obj_dir/Vtb_mem_controller
```

Substitute any other testbench name. The DRAM model and the testbenches use
associative arrays and delays, so they are simulation-only. Everything in `rtl/`
is synthesizable. The caches and buffers are written as plain arrays so that
they map to block RAM.
