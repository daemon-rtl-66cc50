# DaeMon engines: moving remote data at two granularities at once

In a disaggregated system a server's CPU reaches much of its memory over a
network, in a separate memory component. Whenever the data a core misses on is
remote, two granularities are possible:

- Fetch the 64-byte cache line. This is fast, but it gives no locality.
- Fetch the whole 4 KB page into the server's local DRAM. This pays off for
  later accesses, but the core waits for the full page behind a slow,
  shared link.

The design here does both, independently, and lets hardware decide per miss
which of the two (or both) is worth sending. It has five ideas:

1. **Decoupled granularities.** Cache-line requests and page requests travel
   in separate queues. The first of the two copies to arrive serves the
   core. A line goes straight into the last-level cache (LLC); a page is
   written into local memory.
2. **Approximate bandwidth partitioning.** A queue controller alternates
   between the two queues in a fixed pattern: 21 cache-line requests, then
   one page request. By bytes that is 21 × 64 B against 4096 B, about
   25 % / 75 %. Cache lines never wait behind a burst of pages, and pages
   still make progress. The same controller sits in front of the network
   link and in front of the remote DRAM.
3. **Adaptive selection.** Two small content-addressable buffers track what
   is in flight. For each miss, a selection unit compares how full the two
   buffers are and whether the page is already on its way. It then sends
   the line, the page, both, or nothing.
4. **Dirty-data correctness.** A dirty line evicted while its page is still
   in flight is held back in a dirty buffer and merged after the page lands.
   If too many lines of one page are dirty, the page is *throttled*: the
   dirty lines go to remote memory, and the stale page is discarded and
   requested again.
5. **Link compression of pages only.** Pages are compressed with LZ77 on the
   way over the link. The compression latency is hidden because the
   critical cache line travels uncompressed.

This repository holds synthesizable SystemVerilog for the two engines: the
compute engine beside the CPU and the memory engine in the memory component.
It also holds a top that joins them over one link, and self-checking
testbenches for every block. The CPU, the DRAMs and the network are not
designed here; the testbenches model them.

## 1. System picture

```
            CPU + LLC                                 remote DRAM
               |  miss / dirty eviction / line fill        ^ mr/md (read burst), mw (write)
               v                                           |
   +-----------------------+   c2m: 64-bit flits   +-----------------------+
   |    compute_engine     | --------------------> |     memory_engine     |
   |                       | <-------------------- |                       |
   +-----------------------+   m2c: 64-bit flits   +-----------------------+
               |  page flits, parked dirty lines, page done
               v
         local DRAM
```

`daemon_system` is this picture with the two arrows as wires. Every other
signal in the picture is a port of the top.

## 2. Compute engine

### 2.1 Request path: what to send for one miss

A miss arrives on `cpu_req_*` as a line address (32-bit page number and
6-bit line offset). Two lookups feed the `selection_granularity_unit` in the
same cycle:

- The inflight page buffer, by page number. It answers hit or miss, the
  page's state (scheduled, moved, throttled) and the buffer's fill level.
- The inflight sub-block buffer. It answers whether the page has an entry,
  whether this very line is already in flight, and the buffer's fill level.

The decision, all combinational:

| Situation | Page | Line |
|---|---|---|
| Page not in flight, page buffer and page queue have room | scheduled | sent (unless the line is already in flight) |
| Page not in flight, page buffer full | – | sent |
| Page scheduled (still in the page queue), `sb_count/128 < pg_count/256` | – | sent |
| Page scheduled, sub-block buffer relatively fuller | – | dropped |
| Page moved (its request already left) or throttled | – | dropped |

"Relatively fuller" compares fractions of each buffer's size. The comparison
is done without division, as `sb_count*256 < pg_count*128`.

When a line must be sent but the sub-block queue is full, or the sub-block
buffer has no entry for a new page, the request is stalled (`cpu_req_ready`
low). Low page locality therefore fills the page buffer and pushes the engine
towards lines. High locality fills the line tracking and pushes it towards
pages.

Each outcome shows up on the `stats` strobes: `sgu_both`, `sgu_line_only`,
`sgu_page_only`, `sgu_drop`, `sgu_stall`.

### 2.2 Queues and the queue controller

The sub-block queue (128 entries) and the page queue (256 entries) are plain
FIFOs of line addresses (`sync_fifo`).

`queue_controller` walks a round of `LINE_SLOTS` line slots followed by one
page slot, where `LINE_SLOTS = (4096/64) × r / (1 − r)`. For `r = 25 %`
that is 21; for 50 % it is 64; for 80 % it is 256.

- A slot whose queue is empty is skipped, and that cycle sends nothing. So
  an idle page queue does not give lines more than their share, and vice
  versa.
- A slot whose queue holds a request waits for the consumer's `out_ready`.
- The `pg_hold` input makes the controller skip page slots while the
  consumer cannot take a page. The memory engine uses this; the compute
  engine ties it low.

When a page request is issued, its inflight page buffer entry moves from
*scheduled* to *moved*.

### 2.3 Inflight buffers

Both buffers are CAMs built from per-entry registers and comparators. The
lowest free entry is allocated.

| Buffer | Entries | Entry | States |
|---|---|---|---|
| `inflight_subblock_buffer` | 128 | page (32) + state (1) + 64-bit line vector | scheduled / invalid |
| `inflight_page_buffer` | 256 | page (32) + state (2) + 64-bit dirty-line vector | 00 scheduled, 01 moved, 10 throttled, 11 invalid |

Sub-block buffer:

- One entry covers all in-flight lines of a page, one bit per line.
- A line arrival clears its bit; the entry frees itself when the vector
  becomes empty.
- A page arrival clears the whole entry. Any of its lines that arrive later
  find no bit set and are ignored.

Page buffer:

- It has three independent lookup ports: selection unit, receive path and
  dirty unit.
- Its dirty vector records which lines of the page are parked in the dirty
  buffer.

### 2.4 Receive path

Packets from the link first land in an 8 KB store-and-forward
`packet_buffer`. A packet becomes visible only once its last flit is in, so
the receive logic never waits on the wire. Then:

- **Cache line.** The 8 data flits are gathered into a 512-bit line. If the
  sub-block buffer still has the line's bit, the line is written to the LLC
  (`llc_*`, `line_used`). Otherwise it is dropped (`line_ignored`): its page
  overtook it, and writing it would risk overwriting newer data.
- **Page, state throttled.** The packet is discarded and the page is pushed
  back into the page queue. The entry returns to *scheduled*
  (`page_rerequest`).
- **Page, otherwise.** The four compressed 1 KB chunks are decompressed and
  the 512 flits are written to local memory (`lm_*`). Then:
  - the page's lines are removed from the sub-block buffer;
  - the dirty unit writes every line it parked for the page into local
    memory, on top of the page (`lml_*`);
  - the page entry is freed;
  - `pd_valid` announces that the page is complete.
- **Page, throttled meanwhile.** If the page became throttled while it was
  being decompressed, it is re-requested instead of completed.

While a page is being completed, the dirty unit accepts no new evictions
(`hold`). This way no eviction can slip between the flush and the entry
being freed.

### 2.5 Dirty evictions (`dirty_unit`)

A dirty line evicted by the LLC that misses in local memory arrives on
`ev_*`. Its page is looked up in the page buffer:

- **Not in flight, or throttled.** The line goes straight to remote memory
  as a write-back packet (`dirty_direct`).
- **Scheduled or moved.** The line is parked in the 256-entry dirty data
  buffer and its bit is set in the page's dirty vector (`dirty_buffered`).
  A second eviction of the same line overwrites the parked copy.
- **Parking would give the page more than 8 dirty lines, or the buffer is
  full.** All parked lines of that page, plus the new one, are written to
  remote memory. The page is marked *throttled* and its vector cleared
  (`dirty_throttle`). The copy of the page already in flight is then stale,
  so the receive path will discard it and fetch it again.

Lines are drained one per cycle. Write-back packets of dirty lines have the
highest priority on the outgoing link, ahead of requests.

A page evicted from local memory (`pe_*`, 512 flits) is always written to
remote memory. It is compressed into a staging buffer and sent as a
write-back page packet when the link is free of line write-backs and
requests (`page_evicted`).

## 3. Memory engine

Arriving packets wait in a 32 KB packet buffer, then:

- A line request goes into the 512-entry sub-block queue; a page request
  into the 1024-entry page queue. These are four times the compute-side
  sizes, so that one memory component can serve four compute components.
- A dirty line is written to DRAM at once (`mw_*`).
- A dirty page is decompressed chunk by chunk and written flit by flit.

A second queue controller, with the same 21:1 pattern, decides the order of
DRAM reads:

- A line is read as an 8-flit burst (`mr_len = 8`) and sent back at once
  behind a header flit.
- A page is read as a 512-flit burst into a one-page raw buffer. It is then
  compressed into an 8 KB staging buffer while the DRAM port serves
  further lines.

While the raw buffer or the compressor is busy, the controller skips page
slots (`pg_hold`). Lines therefore keep flowing even with a long page queue.
On the link, a line response that is ready goes before a staged page, at
packet boundaries.

## 4. Link format

Everything crosses the link as 64-bit flits with a `last` flag. Every packet
starts with one header flit:

| bits | 63:61 | 60:39 | 38 | 37:6 | 5:0 |
|---|---|---|---|---|---|
| field | type | reserved | reserved | page number | line offset |

| type | packet | body |
|---|---|---|
| 0 | line request | – |
| 1 | page request | – |
| 2 | line response | 8 flits, flit *i* = bytes 8*i*..8*i*+7 of the line |
| 3 | page response | 4 compressed chunks |
| 4 | dirty line | 8 flits |
| 5 | dirty page | 4 compressed chunks |

**Compressed chunk.** One chunk covers 1 KB of the page (128 flits). It
consists of:

- a header flit with four 16-bit fields; field *k* (bits 16*k*+15:16*k*) is
  the length in bits of segment *k*'s token string;
- then, for *k* = 0..3, ⌈len*k*/64⌉ flits holding that bit string, least
  significant bit first.

Segment *k* is bytes 256*k*..256*k*+255 of the chunk. Byte *j* of a flit is
bits 8*j*+7:8*j*.

**LZ77 tokens**, appended LSB first:

| token | bits | layout (MSB..LSB) | meaning |
|---|---|---|---|
| literal | 9 | `byte[7:0], 0` | one byte |
| match | 17 | `len[7:0], dist[7:0], 1` | copy `len` (2..255) bytes from `dist` (1..255) bytes back; the copy may overlap itself |

All literals (incompressible data) gives 2304 bits = 36 flits per segment,
so a chunk is at most 145 flits and a page at most 581.

## 5. The LZ77 engines

Each unit has four engines, one per 256-byte segment, and each segment is its
own dictionary.

**`lz_comp_engine`** looks at one byte per cycle. An `active` bit vector
marks every earlier position where the current match could continue. A
position survives if the byte after it equals the new byte, so all 256
candidates are compared in parallel.

- When no candidate survives, or the length reaches 255, the pending string
  is emitted: as a match (most recent source) if it is at least 2 bytes
  long, otherwise as a literal. The new byte then starts a fresh string.
- A chunk takes 128 cycles to load, 258 cycles to compress, and one cycle
  per output flit.

**`lz_decomp_engine`** decodes one token per cycle and copies matched bytes
one per cycle. A chunk takes at most about 512 cycles.

The published design this follows reaches 64 cycles per KB with a wider
datapath. This implementation is about four times slower. The engines stay
off the critical path, because cache lines are never compressed.

## 6. Parameters

| Parameter | Default | Where |
|---|---|---|
| sub-block queue / page queue (compute) | 128 / 256 | `compute_engine` `SBQ_DEPTH`, `PQ_DEPTH` |
| sub-block queue / page queue (memory) | 512 / 1024 | `memory_engine` `SBQ_DEPTH`, `PQ_DEPTH` |
| inflight sub-block / page buffer | 128 / 256 | `SB_ENTRIES`, `PG_ENTRIES` |
| dirty data buffer, threshold | 256 lines, 8 lines | `DIRTY_ENTRIES`, `DIRTY_THRESH` |
| packet buffer compute / memory | 8 KB / 32 KB | `PKT_BYTES` |
| cache-line bandwidth share | 25 % (21:1) | `RATIO_PCT` |
| compression | 4 engines × 256 B, 1 KB chunks | fixed |

All sizes are the published ones, and the top is simulated and synthesized at
these defaults.

## 7. Where this RTL departs from the published description, or fills gaps

These are the choices made here:

- **Interfaces.** The packet format, the flit width, the valid/ready
  handshakes, the memory burst interface and the interfaces to the CPU and
  local memory are all choices of this design. The published description
  gives the blocks and their sizes, not their signals.
- **LZ77.** The token format and the one-byte-per-cycle engines are choices
  of this design. The latency is therefore about 258 + 128 cycles per KB
  instead of the quoted 64 cycles.
- **Dirty data buffer entry.** It stores the full page number + line offset
  (38 bits) where the published entry layout shows a 32-bit address field.
- **Full dirty buffer.** It is handled exactly like exceeding the
  threshold (flush and throttle). The published text does not cover it.
- **Completion order.** Lines parked for a page are written into local
  memory right after the page, while new evictions are held off. The
  published text only says that they are kept until the page arrives.
- **Memory engine internals.** The raw page buffer, the compression staging
  buffer and the `pg_hold` skip are this design's own. The published text
  does not describe how the memory engine overlaps DRAM reads with
  compression.
- **Not built.** The network, the CPU and LLC, both DRAMs, the FPGA
  coherent interconnect and the memory component's address translation.
  They come from elsewhere, and the testbenches model them.
- **One memory component.** Only one memory component is connected.
  Several would need a router that steers each request by address, which is
  not described.
- **Late lines in the end-to-end test.** A line that arrives after its page
  cannot occur on a single in-order link, because the line request always
  leaves first. The ignore path is exercised in `tb_compute_engine`, whose
  memory side reorders responses.

## 8. Simulating

Each testbench is self-checking. It prints
`TB_RESULT checks=<n> failures=<m>` and stops; a watchdog ends a hung run
with a failure (the end-to-end test also stops once nothing has been
delivered for 150 000 cycles). With plain Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
          -Irtl -Itb rtl/daemon_pkg.sv tb/tb_daemon_system.sv \
          --top-module tb_daemon_system -Mdir obj_sys
obj_sys/Vtb_daemon_system
```

Replace the testbench name for the others. Files are found by module name
through `-Irtl -Itb`.

| Testbench | What it checks |
|---|---|
| `tb_sync_fifo` | random traffic against a queue model, full and empty reached |
| `tb_queue_controller` | exactly 21 lines between pages; one page per 22 cycles with no lines; `pg_hold` skips; order and no loss under back-pressure |
| `tb_inflight_subblock_buffer` | random insert/arrival/page-removal against a model; hit flags, count, full |
| `tb_inflight_page_buffer` | allocate/move/state-write/dirty/throttle against a model on all three ports |
| `tb_selection_granularity_unit` | 20 000 random buffer views against the decision rules; all four outcomes |
| `tb_dirty_unit` | parking, overwrite, direct write-back, threshold and full-buffer throttling, flush to local memory, with the real page buffer |
| `tb_packet_buffer` | store-and-forward, in-order delivery, fill to 1024 flits |
| `tb_compression_unit` | five data kinds decoded by an independent decoder; compression ratio; latency 257–270 cycles from the last input flit |
| `tb_decompression_unit` | token streams from an independent randomised encoder (overlapping and long copies) |
| `tb_compute_engine` | memory side played by the testbench, with reordering: lines used, late lines ignored and kept out of the LLC, every local-memory flit, write-back data |
| `tb_memory_engine` | page responses decoded and compared with DRAM; lines flow during compression; dirty line and page write-backs |
| `tb_daemon_system` | whole design at default sizes, end to end (below) |

`tb_daemon_system` runs six phases against a remote DRAM model with a
40-cycle latency:

- A: first lines of 40 fresh pages, then second lines of the same pages
  while they are in flight (so some requests are dropped);
- B: a few dirty evictions to an in-flight page, parked and then merged into
  local memory;
- C: nine dirty evictions to one in-flight page, so it is throttled,
  its lines go to remote memory, and the page is discarded and re-requested;
- D: dirty evictions to pages that are not in flight, sent straight to
  remote memory;
- E: a dirty page evicted from local memory, then checked in remote DRAM;
- F: a flood of requests to 300 fresh pages that fills the buffers, so that
  requests go line-only, stall and are dropped.

Every page that reaches local memory is compared with the expected content,
including merged dirty lines. Each mechanism is counted, and the test fails
if one never happens.

A run takes about 20 s and 662 000 cycles. In it:

- 303 misses were served at both granularities and 40 as line only;
- 140 misses were dropped, and requests stalled for 13 037 cycles;
- 12 dirty lines were parked, 5 went straight to remote memory, and 1 page
  was throttled and re-requested;
- 4 parked lines were merged into local memory, and 1 page was evicted.

Each block also has a deliberately broken copy, with one bug, that its
testbench was confirmed to catch.

## 9. Implementation notes

- All state is reset by the asynchronous active-low `rst_n`, except the
  data arrays of FIFOs and the dirty buffer. Those are never read before
  they are written.
- The CAMs are written as one small register process per entry (generate
  loops), with one-hot-to-index encoders. This keeps elaboration fast at
  256 entries.
- The only lint warnings left are unused outputs (for example `pkt_count`
  where a consumer ignores it) and the reset used both as an asynchronous
  reset and in `disable iff` of the handshake assertions.
