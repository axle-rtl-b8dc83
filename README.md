# Asynchronous back-streaming for CXL computational memory

A computational memory (CCM) device runs a kernel that the host has
offloaded. The host usually needs that kernel's result for its own next
step. The usual approaches are poor fits. If the host blocks until the
whole kernel ends, neither side overlaps with the other. If the host
polls a remote flag over the link, it pays a link round trip on every
poll, and again on every load of result data.

The design here reverses the direction. As soon as a slot's worth of
result is complete, the **device pushes it** into a ring buffer in host
memory with a posted DMA write. It then publishes the slot through a
second ring of small metadata records. The host watches a single *local*
word, the metadata ring's tail index. A host task that runs later finds
its input already in local memory.

The only message that travels the other way is a flow-control store.
It carries the host's new head index, so the device knows which ring
slots it may reuse. Neither side ever waits for the other: the device
judges free space against the last head it heard of. A stale head only
makes it more cautious, never unsafe.

This repository holds synthesizable SystemVerilog for that datapath:
- the device-side engine that forms payloads and streams them;
- the host-side receive region, the polling routine and the ready pool;
- the gap-aware payload head;
- the flow-control sender.

The CXL link, the device's compute cores and memory, and the host's cores
are outside the RTL. They appear as ports.

## The data flow, end to end

```
  CCM side (clk_ccm, 2 GHz)                          host side (clk_host, 3 GHz)

  uthread result stores ─► payload_former                   host_dma_region
     (st_*)                 │ completed 32-B chunks          ┌ payload ring [CAP slots]
                            ▼                                ├ metadata ring [CAP records]
  device memory ◄──── dma_executor ── CXL.io posted ────────►├ payload tail word
     (mem_rd_*)         local heads/tails   writes           └ metadata tail word
                            ▲           (ccm_dma_* → host_dma_*)   │ local reads
                            │                                      ▼
                            │                               host_poller ──► ready_pool ──► host scheduler
                            │                                 (every PF)      (any order)     │
                            │                                                                 │ reads payload,
                            │            CXL.mem stores       fc_sender ◄─ payload_head_tracker ◄─ consume
                            └────────── (host_fc_* → ccm_fc_*) ◄── metadata head from poller
```

1. **Kernel start.** `start` arrives with the result size in bytes, the
   streaming mode and the streaming factor. The result region is
   `result_bytes` long and is cut into 32-byte chunks. The last chunk may
   be shorter.
2. **Payload forming.** Every result store of a uthread (`st_offset`,
   `st_bytes`) adds to its chunk's byte counter. A chunk whose counter
   reaches the chunk size is complete, and becomes a *payload*.
3. **Credit and batching.** The executor admits a payload only while both
   rings have a free slot, judged by the device's own copy of the heads.
   It gives the payload the next payload-ring slot. Once `sf_slots`
   payloads are pending, the batch is triggered. `sf_slots` is the
   streaming factor (SF).
4. **Streaming.** The batch becomes a DMA request. Once its preparation
   latency has passed, the executor writes the batch in this order:
   - for each payload: read its data from device memory, then write it;
   - one payload-tail update for the whole batch;
   - for each payload: its metadata record, then a metadata-tail update.
5. **Notification.** Every PF, the host polling routine reads the local
   metadata tail word. It moves each new record into the ready pool and
   then reports its new metadata head.
6. **Consumption.** The host scheduler takes any pool entry. The entry's
   `p_slot` field names the payload slot to read. When the task is done,
   the host reports that slot as consumed. The payload head advances over
   the contiguous run of consumed slots, and its new value is reported to
   the device.

## Rings, indexes and why a stale head is safe

Each ring has `CAP` slots; the default is 50000. Every head and tail is
held as a *position* in `[0, 2*CAP)`. This is the slot number plus one
lap bit. With this encoding:
- occupancy is `(tail − head) mod 2*CAP`;
- a full ring (occupancy `CAP`) and an empty one (occupancy 0) differ
  without a spare slot.

The helpers `ptr_inc`, `ptr_slot` and `ptr_occ` in `axle_pkg` implement
this.

The device keeps four indexes. It advances its two tails itself. Its two
heads are copies, overwritten whenever a flow-control store arrives.
Because the host's real head never falls behind the copy the device
holds, occupancy computed from the copy is never lower than the truth.
A late or lost flow-control store can therefore only cost throughput.
The host's sender exploits this: if a newer head is produced before an
older one was sent, it overwrites the older one (`fc_sender`).

The host side reads a tail word, and nothing else, to learn what has
arrived. The device's write order is what makes this safe:
- a metadata record is written after its payload;
- the metadata tail that publishes a record is written after the record.

All writes go out on one in-order posted-write channel. Any record the
host can see below the tail therefore points at complete payload data.
On a real link, the ordering comes from fences around the DMA writes. In
the RTL, it is the strict issue order of `dma_executor`'s state machine.

## Out-of-order streaming and the gap-aware head

The device's uthreads finish chunks in whatever order the CCM scheduler
produces them. The host's scheduler also picks tasks in its own order.
Two decisions keep these schedulers decoupled.

- **Out-of-order streaming** (`ooo_en = 1`, the default). A payload is
  streamed as soon as its chunk completes, whatever its offset. Payload
  slots are handed out in streaming order, not offset order. The
  metadata record carries both numbers: `data_offset` says where the
  data belongs in the result, and `p_slot` says where it sits in the
  ring.

  With `ooo_en = 0`, payloads are released strictly by offset. A scan
  pointer waits at the first incomplete chunk, and `ccm_hol_wait` is
  high while finished chunks queue behind it. This is the mode whose
  cost the out-of-order mode removes.

- **Gap-aware payload head.** The host may finish with slot 1 before
  slot 0. The tracker keeps one "consumed" bit per slot. It moves the
  head forward one slot per cycle, only while the slot at the head is
  marked, clearing bits as it passes. In the example, the head stays at
  0 until slot 0 is consumed, and then jumps past both slots. One
  flow-control store is asked for when a run of advances stops, not one
  per slot. `host_gap` pulses when a consumed slot is not the head slot.

The metadata ring needs no such tracking. The polling routine drains it
strictly in order into the ready pool, and its head is reported once per
drain. The ready pool (`ready_pool`, 64 entries) is where ordering
freedom is given to the host. It shows every entry to the scheduler,
which may pop any of them.

## Streaming factor, preparation and batching (`dma_executor`)

The executor has three parts that run side by side.

**Admission** takes one payload per cycle. It needs all of these:
- both rings have credit;
- fewer than `sf_slots` payloads are waiting to form the next batch;
- the payload buffer has room.

Each admitted payload gets the next slot of both rings at once. Its
{offset, size} goes into the payload buffer, a FIFO shared by all
batches that are not yet published. A payload offered without credit
raises `bp_wait` (back-pressure).

**Trigger.** A batch is formed when either:
- `sf_slots` payloads are waiting; `sf_slots` is the streaming factor
  (SF);
- or the kernel's last payload has been admitted.

The batch becomes a DMA request that is *due* `PREP_CYCLES` later. Up
to `MAX_PREP_REQS` (128) requests can be in preparation together.

Preparation is thus a latency per request, like a descriptor's trip
through the control path. It is not a period during which the engine
does nothing. Making it serial would be wrong: SF1 would then pay
1000 cycles for every 32 bytes. The 512-row KNN kernel would take over
64 000 cycles instead of about 2 500.

**Issue** takes the oldest request once it is due, and writes it as a
short state machine:

| state | what it does |
|---|---|
| `IDLE` | waits for the oldest request to become due |
| `READ`/`WAITRD`/`PAY` | for each payload: reads one slot from device memory and writes it to its payload slot |
| `PTAIL` | one payload-tail update for the batch |
| `META`/`MTAIL` | for each payload: its metadata record, then a metadata-tail update |

Requests are written strictly in order, one at a time. A tail therefore
never names a slot that has not been written, even while later batches
are already allocated.

**Limits on SF.** SF ranges from 1 slot (32 B) up to `MAX_SF_SLOTS`.
That defaults to 50000 slots, so a whole kernel result can leave as one
batch. SF must also be at most `CAP`: a batch is published only as a
whole, so a batch larger than the ring would wait forever for credit.
An assertion catches both limits.

**What SF trades.** A larger SF means fewer requests, so fewer
payload-tail writes and fewer request slots. But it holds results back
until the batch is full. The metadata tail is still written once per
payload, so the host can start on the first payload of a batch before
the last one's record is written.

**Kernel ends and back-pressure.**
- A kernel whose payload count is not a multiple of SF ends with a
  shorter batch. It is triggered as soon as the kernel's last payload is
  admitted.
- Back-pressure can split the forming of a batch across a wait. The
  admitted payloads simply wait in the buffer until credit returns.

## Block reference

| module | clock | what it holds | key ports |
|---|---|---|---|
| `axle_pkg` | – | `ptr_t` (17-bit position), `meta_t` {`data_offset`[32], `data_size`[16], `p_slot`[16]}, `dma_kind_e`, `fc_kind_e`, index helpers | – |
| `payload_former` | CCM | byte counter per chunk, queue of completed chunk ids, scan pointer for in-order mode | `st_*` in; `chunk_valid/ready/id/size/last` out; `hol_wait`, `init_busy` |
| `dma_executor` | CCM | local heads/tails, payload buffer of {offset, size} (MAX_SF_SLOTS entries), request queue with due times, issue state machine | `chunk_*` in; `rd_req/rd_rsp` to device memory; `dma_*` out; `fc_*` in; `bp_wait`, `busy` |
| `host_dma_region` | host | payload ring (CAP × 32 B), metadata ring (CAP × 64 bit), two tail words | `dma_*` in (always accepted); metadata and payload read ports, 1-cycle latency |
| `host_poller` | host | PF timer, metadata head | reads tail and metadata; `push` to pool; `fc_req/fc_ptr`; `notify`, `polls` |
| `ready_pool` | host | `DEPTH` entries with valid bits | `push`; `entry_valid`, `entries`, `pop`/`pop_idx` |
| `payload_head_tracker` | host | consumed bitmap (CAP bits), payload head | `consume/consume_slot`; `head`; `fc_req/fc_ptr`; `gap` |
| `fc_sender` | host | one pending head per ring | `p_req`, `m_req`; `fc_valid/ready/kind/ptr` |
| `axle_top` | both | the above, wired | see below |

Handshakes are valid/ready, except in these places:
- DMA writes into the host region are always accepted.
- Flow-control stores into the executor are always accepted.
- Result stores into the payload former are always accepted. Its queue
  is `MAX_CHUNKS` deep, so it never fills.

Assertions in the modules check the handshake rules:
- no push into a full pool;
- no consume of a slot outside the ring;
- no store crossing a chunk boundary;
- the ring occupancy never exceeds `CAP`.

### Top-level ports and the link

`axle_top` has two independent clock domains. No signal crosses between
them inside the module. The link connects them outside:

- `ccm_dma_valid/ready/kind/ptr/data` → CXL.io posted writes →
  `host_dma_valid/kind/ptr/data`.
  - `kind` is one of: payload, payload tail, metadata record, metadata
    tail.
  - `ptr` is the ring position. For a metadata write, the record is in
    the low 64 bits of `data`.
- `host_fc_valid/ready/kind/ptr` → CXL.mem stores →
  `ccm_fc_valid/kind/ptr`.

The other ports of the top connect to the parts outside the datapath:
- the uthread stores: `st_*`;
- device memory reads: `mem_rd_*`, `mem_rsp_*`, any latency, one
  outstanding;
- the kernel start: `start`, `result_bytes`, `ooo_en`, `sf_slots`;
- the host scheduler: `pool_*` to choose a task, `pay_rd_*` to read its
  payload, `consume*` to free the slot.

Status outputs expose the mechanisms:
- `ccm_bp_wait` (back-pressure);
- `ccm_hol_wait` (in-order stall);
- `host_notify` (a poll found new data);
- `host_gap` (consumption out of order);
- `host_polls` (number of polls);
- the four indexes.

After reset, both sides clear their large arrays one entry per cycle.
`ccm_init_busy` stays high for `MAX_CHUNKS` cycles and `host_init_busy`
for `CAP` cycles. Nothing may be started or consumed until both are low.

### Parameters

| parameter | default | meaning | origin |
|---|---|---|---|
| `SLOT_BYTES` | 32 | DMA slot = ring slot = payload size | paper (32 B default, 64 B also evaluated) |
| `CAP` | 50000 | slots per ring | paper |
| `PREP_CYCLES` | 1000 | DMA preparation latency per request, 500 ns at 2 GHz | paper |
| `MAX_PREP_REQS` | 128 | requests in preparation at once | chosen (enough to hide the latency at SF1) |
| `PF_CYCLES` | 150 | polling interval, 50 ns at 3 GHz | paper (smallest of 50 ns / 500 ns / 5 µs) |
| `MAX_SF_SLOTS` | 50000 | largest streaming factor, in slots | chosen to cover a batch of the whole result (the largest factor evaluated) |
| `MAX_CHUNKS` | 50000 | largest kernel result, in slots (1.6 MB) | chosen |
| `POOL_DEPTH` | 64 | ready pool entries | chosen |

The clock rates (CCM 2 GHz, host 3 GHz) and the link latencies used in
the testbenches are the evaluated system's:
- CXL.io round trip: 350 ns;
- CXL.mem round trip: 70 ns.

## Where this departs from the described system

- **Addresses.** DMA writes name a ring and a ring position, not a host
  physical address. The scatter-gather descriptors that a driver would
  give the device are not modelled.
- **Host memory.** The host DMA region is an on-chip array. In a real
  system it is pinned, uncached host DRAM.
- **Host software as hardware.**
  - The polling routine is a state machine. It moves one record every
    two cycles and pauses while the ready pool is full.
  - The host scheduler is the testbench.
- **Batching.**
  - Up to 128 requests are prepared at once, and they are written one
    at a time in order. The source gives the 500 ns preparation latency
    per request. It does not say how many requests may overlap, or
    whether writes of different requests interleave.
  - A short final batch is flushed at the kernel's end. The source does
    not say how that batch is sent.
- **Chosen sizes.** Widths of the metadata fields, the ready-pool depth
  and the kernel-size limit are this design's choices.
- **Batch buffer.** Supporting a batch of a whole result costs a buffer
  of 50000 × 48 bits in the executor. A design that only needs small
  streaming factors can set `MAX_SF_SLOTS` lower.
- **Completion.** Kernel completion is implicit: the host counts
  payloads. An explicit tagged end-of-kernel message, which the source
  mentions for multi-tenant use, is not built. Neither is an
  interrupt-driven notification variant.
- **Not modelled.** The device's uthread cores and scheduler, the host
  cores, the CXL link and the device DRAM are outside the RTL.
  - Testbenches model the link with fixed latencies.
  - Testbenches model device memory as an array.
- **Storage size.** At the defaults, the host region alone holds 1.6 MB
  of payload storage. A real implementation would keep it in DRAM.

## Testbenches

Each `tb/tb_<module>.sv` is self-checking. It prints
`TB_RESULT checks=N failures=M`, and a watchdog ends it if it hangs.

| testbench | what it shows |
|---|---|
| `tb_payload_former` | random store orders in both modes; completion-order queuing and head-of-line stall; short last chunk |
| `tb_dma_executor` | exact write sequence; preparation latency of every batch, and overlap of one batch's preparation with the previous batch's writes; back-pressure when heads are stale, release on a flow-control store; second kernel with a short batch |
| `tb_host_dma_region` | writes of all four kinds, read latency |
| `tb_host_poller` | polling period, in-order drain, pause on a full pool, one flow-control request per drain |
| `tb_ready_pool` | random push/pop against a reference model |
| `tb_payload_head_tracker` | random consumption orders, head against a reference, gaps, wrap |
| `tb_fc_sender` | coalescing to the newest head, alternation |
| `tb_axle_top` | six kernels at small sizes (16-slot rings) through a latency model of the link, host picking tasks at random. It counts and requires each mechanism: back-pressure, in-order stall, gaps, notifications, ring wrap, out-of-order delivery, flow-control stores, multi-batch kernels, short batches, a partial last slot, two DMA requests in preparation at once, and a full request queue (limited to 2 requests). |
| `tb_axle_full` | one KNN result (512 distances, 64 payloads) with every parameter at its default |
| `tb_axle_workloads` | the evaluated workloads whose result sizes are known, at default parameters (see below) |
| `tb_axle_slot64` | the KNN result with 64-byte slots (32 payloads), other parameters at their defaults |
| `tb_axle_pf` | the KNN result with the longest polling interval, 5 µs (15000 host cycles), other parameters at their defaults. Polls must fall exactly one interval apart, and no published result may wait longer than one interval for the host to see it. The longest wait is about 14980 host cycles, against at most 150 at the default interval. |
| `tb_axle_dmacp` | SSSP with rings cut to 12.5% (6250 slots) and a host slower than the device: the rings fill and lap five times. The bench requires back-pressure and reports its share of the run, about 85% of CCM cycles with these settings, where the host, not the link, limits the rate. |

Workloads run by `tb_axle_workloads`:
- three KNN shapes: 16, 32 and 64 payloads;
- one attention row of a 2560-wide language model: 320 payloads;
- SSSP on a 264k-vertex graph: 33044 payloads;
- PageRank on a 299k-vertex graph: 37384 payloads.

The graph results assume 4 bytes per vertex. Every workload streams at
SF1, and the whole run takes about half a minute.

The bench then runs SSSP again with out-of-order streaming off. The
stores arrive interleaved from 16 streams, so chunks complete out of
offset order, and the executor stalls behind each unfinished chunk:
- the kernel takes 1.47× as long;
- the average payload reaches the host 1.91× later.

That is the effect the out-of-order mode exists to remove.

Last, PageRank runs with larger batches:

| batch size | kernel time (CCM cycles) | average payload delivery |
|---|---|---|
| SF1 | 0.56 M | 0.28 M |
| SF64 | 0.49 M | 0.25 M |
| 25% of the result (9346 slots) | 0.57 M | 0.37 M |
| 100% of the result (37384 slots) | 0.81 M | 0.76 M |

- **Moderate batches help a little.** SF64 has fewer payload-tail
  writes and fewer requests.
- **Very large batches hurt.** Results are held back until the batch is
  full. At 100%, nothing reaches the host until the whole result is
  ready.
- **Caveat.** The stores here arrive back to back. A compute-bound
  kernel would make the trade-off depend on how fast the result is
  produced.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl +libext+.sv \
    rtl/axle_pkg.sv tb/tb_axle_top.sv --top-module tb_axle_top -o sim
./obj_dir/sim
```

`-Wno-fatal` keeps the warnings visible but lets the build go on. With the
small rings of the reduced benches, Verilator notes that the 16-bit slot
indexes are wider than a 16-entry array needs; at full size the widths
match.

To try a change, edit a parameter override in `tb_axle_top`. That bench
uses small rings, so flow control and wrap-around happen within a few
thousand cycles.
