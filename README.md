# An RDMA NIC built from reusable building blocks

This repository holds synthesizable SystemVerilog for a network interface card (NIC) that
offloads RDMA WRITE traffic. The NIC is composed of four subsystems, and each subsystem is made
of a small set of generic hardware primitives:

| subsystem | job | built from |
|---|---|---|
| Queue subsystem (QS) | decides *when* work is done: doorbells, WQE fetch, scheduling, rate limiting | `queue_subsystem`, `queue_cache`, `wqe_parser`, `rate_limiter` |
| Resource subsystem (RS) | keeps protocol state (QP contexts, memory keys, page tables) in host memory and caches it on chip | `resource_subsystem` (one instance per table), `multi_queue` |
| Semantics subsystem (SS) | decides *what* goes on the wire: headers and payload | `req_trans_core`, `req_recv_core`, `gather_data`, `append_header`, `remove_header` |
| Transport subsystem (TS) | decides *how* it gets there reliably: sequence numbers, ACK/NAK, retransmission | `transport_subsystem`, `dynamic_buffer` |

A single `dma_engine` connects all of them to host memory. The top is `jingzhao_nic`.
Beside the RDMA path, the top also holds a second example core, `key_value_core`. It serves
key-value lookups over Ethernet framing (see below) on ports of its own.

The basic idea is that a protocol offload is a chain of a few recurring operations:
- read a resource;
- generate a header field;
- gather or scatter payload;
- append or remove a header.

Once those operations exist as well-tested blocks, a new protocol core is mostly a matter of
wiring them up and writing the header generators. The request core here is exactly that chain.

## What happens to one RDMA WRITE

1. **Posting.** Software writes a 64-byte WQE into a ring in host memory. It then writes the
   queue's new tail index to the doorbell port (`db_*`).
2. **Scheduling** (`queue_subsystem`).
   - The queue status table holds head, tail, ring base and size for each of 256 queues.
   - A doorbell for an idle queue puts the queue number into a FIFO of ready queues.
   - The scheduler takes one queue, fetches and parses **one** WQE, and re-queues the queue at
     the back if it still has work. Busy queues therefore take turns WQE by WQE.
3. **WQE fetch** (`queue_cache`).
   - The WQE cache is 1024 slots of 128 bits, grouped into cells of 16 slots (4 WQEs).
   - A queue owns the cell selected by the low bits of its number. A record per cell holds the
     owner, the ring index of the first cached WQE, and the count.
   - A request for a WQE that is not cached takes the cell over and refills it by one DMA read of
     up to four WQEs. The read never runs past the ring end or past the WQEs actually posted.
4. **Parsing and rate limiting** (`wqe_parser`, `rate_limiter`).
   - The WQE carries an opcode, up to three scatter/gather elements, and the remote key and
     address.
   - The parser first asks the rate limiter whether `already_sent + length <= window` for the
     queue. If so, it charges the bytes and emits one *sub-WQE* per element, with the remote
     address advancing element by element.
   - If not, the WQE stays in the ring and the queue retries on its next turn.
   - The window is set through `rl_cfg_*`, which is the hook for a congestion-control
     algorithm. Setting it also clears the byte count.
5. **Packet generation** (`req_trans_core`), for each sub-WQE:
   - MPT lookup of the local key, giving the region's virtual base and its first MTT index;
   - QPC lookup, giving the destination QP and the next PSN;
   - the element is cut into packets of at most 512 bytes that never cross a 4 KiB page;
   - for each packet, an MTT lookup gives the physical page, `gather_data` reads the payload,
     and two `append_header` stages put a 16-byte RETH and then a 12-byte BTH in front;
   - after the last packet, the advanced PSN is written back to the QPC.
6. **Transport** (`transport_subsystem`). The packet is stored in the egress buffer, numbered,
   sent, and kept until a cumulative ACK covers it.
7. **Receiving** (`transport_subsystem`, then `req_recv_core`).
   - The peer stores arriving packets, possibly out of order.
   - It commits them in PSN order and acknowledges them.
   - The receive core strips BTH and RETH and writes the payload by DMA to the RETH address.

## The resource caches (`resource_subsystem`)

This is the hardest part of the design to follow, and the one whose behaviour matters most for
performance.

Each protocol table lives in host memory and gets its own cache instance:

| table | entry | cache lines |
|---|---|---|
| QPC | 416 bits | 128 |
| MPT | 256 bits | 512 |
| MTT | 64 bits | 1024 |

A plain blocking cache would stall every connection behind one miss: a PCIe round trip is about
350 ns, or 70 clocks at 200 MHz. This cache is **non-blocking per connection**:

- Read requests from the channels are arbitrated round-robin into a request FIFO.
- The lookup stage gives every request an entry of a *reorder buffer*, and queues the entry
  number under the request's connection in a `multi_queue`.
  - A hit writes the line's data into the entry at once.
  - A miss leaves the entry empty and issues a DMA read of the table entry.
- DMA responses fill their entry and refill the line. A refill does not overwrite a line that a
  later write already installed.
- The response side visits the non-empty connection queues round-robin. For each, it returns the
  head entry as soon as that entry is filled.

As a result, a miss holds back only later requests **of the same connection**. Hits and misses
of other connections overtake it, while each connection still sees its answers in request order.

Writes (CacheModify) update the line and are written through to host memory. Deletes invalidate
the line.

The cache is direct-mapped. The host address of entry `k` is `icm_base + k * stride`, where the
stride is the entry size rounded up to a power of two. In the top, the DMA engine always fetches
the aligned 64-byte beat that holds the entry, and the top shifts the entry out of it by its
offset. The offset is remembered per DMA tag.

## Reliable transport (`transport_subsystem`)

The send side stores each packet in a `dynamic_buffer` and remembers its handle by PSN. The
buffer is 32 slots of one beat each, with slots linked like a heap allocator's free list.

A request arbiter shares the link, in this priority order:
1. a pending control packet (ACK or NAK for the receive side);
2. freeing slots of acknowledged packets;
3. a retransmission;
4. a new packet.

Loss recovery:
- **Selective Repeat** (the default, `GBN=0`): a NAK for PSN *e*, or a timeout of the oldest
  unacknowledged packet, resends only *e*.
- **Go-Back-N** (`GBN=1`): the same events resend *e* and everything sent after it.
- One timer watches the oldest unacknowledged packet. It restarts whenever the acknowledged
  point moves, and fires after `TIMEOUT` clocks.

The receive side accepts any data packet inside a 16-PSN window into a second dynamic buffer.
Under Go-Back-N it accepts only the expected PSN.
- It commits stored packets in PSN order, reading and freeing them in one walk.
- Every commit asks for a cumulative ACK.
- A gap (expected packet missing, a later one present) asks for one NAK. A new NAK is sent only
  after the expected PSN has moved on.
- Duplicates trigger a fresh ACK, so a lost ACK is repaired.

A subtle point: the ingress buffer holds only three maximum-size packets (9 beats each). If
out-of-order packets could fill it, the missing packet would never fit and the receiver would
deadlock. An out-of-order packet is therefore accepted only when room for one more
maximum-size packet remains after it.

Packets cross the link as 64-byte beats (`beat_t`) with a sideband header `ts_hdr_t {type, psn}`
held for the whole packet. A control packet is a single beat with `nbytes = 0`. There is one
reliable connection per transport instance.

## The key-value core (`key_value_core`)

A small in-network key-value store, built from the same primitives plus a hash core.

- **Sending a request.** A request carries GET or SET, a key of up to 24 bytes and, for SET, a
  256-bit value. Generate Key packs it into one 64-byte payload beat: op, key length, key,
  value. Generate ETH builds a 14-byte Ethernet header, and `append_header` puts it in front.
- **Receiving.** `remove_header` strips the Ethernet header and Extract Key parses the payload.
  - Responses go to the result port.
  - Requests go to the hash stage.
- **Hashing.** `NHASH` copies of `sha256_core` (16 by default) each take 64 clocks per key.
  - Keys are handed to the cores round-robin and collected in the same order.
  - So the service rate is `NHASH`/64 requests per clock and answers keep request order.
    Measured: `NHASH`/67, because dispatch and collection add a few clocks per hash. That is
    about 3 Mops/s per core at 200 MHz, and 48 and 96 Mops/s with 16 and 32 cores.
- **Value search.** The top 64 bits of the digest are the hash.
  - Bits 9:0 pick one of 1024 slots of 256-bit values.
  - The other 54 bits are stored as a tag; a GET whose tag differs misses.
  - SET overwrites the slot.
- **Answering.** The response (hit with value, miss, or set-done) goes back to the requester's
  MAC. Responses have priority over new requests.

## Building blocks

- **`multi_queue`**: many FIFOs in one buffer.
  - A table holds head, tail and empty for each queue. Each buffer entry stores data and a next
    pointer; free entries sit in a free list.
  - Enqueue and dequeue each take one clock, including both on the same queue at once.
  - `peek_*` shows any queue's head combinationally.
- **`dynamic_buffer`**: packet storage with allocate/free semantics.
  - Inserting a packet returns a handle.
  - A walker command on the handle emits the packet, frees it, or does both.
- **`append_header` / `remove_header`**: add or strip an N-byte header on the 512-bit bus.
  - They shift the payload across beat boundaries.
  - They add at most one extra beat (append) or one bubble (remove) per packet.
- **`gather_data`**: reads a buffer at any byte alignment.
  - It issues one aligned DMA read and shifts the stream down by `addr mod 64`.
  - Bytes past the end of the last beat are zero.
- **`dma_engine`**:
  - Read clients are served round-robin. Requests are split at 512 bytes, the maximum read
    request size.
  - Each piece gets one of 64 tags. Completions may return in any tag order.
  - A 512-beat reorder buffer (64 tags × 8 beats) hands each client its data in order.
  - Writes are cut into bus writes of at most 512 bytes (the maximum payload size).
  - Addresses must be 64-byte aligned.

## Conventions

- One clock, synchronous active-low reset (`rst_n`).
- All streams use valid/ready. A transfer happens on a rising edge where both are high.
- A beat (`beat_t`, in `jz_pkg`) is `{data[511:0], nbytes, last}`:
  - byte 0 is `data[7:0]`;
  - `nbytes` counts valid bytes from byte 0;
  - only the last beat of a packet may be partial.
- Headers on the wire are big-endian per field:
  - BTH = opcode, flags, P_Key, reserved, destination QP (3 B), A-bit, PSN (3 B);
  - RETH = virtual address (8 B), rkey (4 B), length (4 B).
- Table layouts used by the request core:
  - MPT `[63:0]` virtual base and `[95:64]` first MTT index;
  - MTT = physical page address;
  - QPC `[23:0]` destination QP and `[47:24]` next PSN.
- WQE layout (64 B):
  - `[7:0]` opcode (1 = RDMA WRITE), `[15:8]` element count (1..3);
  - `[63:32]` rkey, `[127:64]` remote address;
  - element *i* at bit `128(i+1)` = `{len[31:0], lkey[31:0], laddr[63:0]}`.

## Sizes

The defaults follow the reference design:
- 512-bit data path, 200 MHz target;
- MultiQueue and dynamic buffers of 32 × 512 bits;
- DMA reorder buffer of 512 × 512 bits;
- WQE cache of 1024 × 128 bits;
- QPC 416 × 128, MPT 256 × 512, MTT 64 × 1024;
- 256 queues;
- key-value value memory of 256 × 1024 bits and 64-clock SHA-256 cores;
- 512-byte maximum read request size and maximum payload size.

The following are this design's own choices:
- 512-byte packet payload;
- 4 KiB pages;
- 16-PSN window;
- 2048-clock retransmission timeout;
- 16-slot WQE cache cells;
- 128-entry reorder buffers in the resource caches;
- 24-byte maximum key and 16 hash cores in the key-value core.

## Where this design departs from the reference, and what is missing

- **Only RDMA WRITE.** Other opcodes are counted in `stats.unsupported` and dropped. SEND and
  READ are not handled, there are no responder cores, and there is no completion path: no CQ
  context cache and no CQEs.
- **Self-contained packets.** Every packet carries its own RETH, i.e. it is a WRITE-ONLY packet
  rather than FIRST/MIDDLE/LAST.
- **Receive side.** It trusts the RETH address as a physical address: there is no rkey
  translation or access check, and no PSN or opcode validation beyond an assertion.
- **Request core throughput.** It has one packet in flight: lookups, then payload. It is
  therefore not pipelined for small-packet throughput.
- **Single-clock primitives.** The MultiQueue finishes enqueue and dequeue in one clock, where
  the reference spends three clocks per enqueue.
- **WQE refill.** The WQE cache refills on a miss rather than on a low-water mark.
- **Throttled queues.** A queue stopped by the rate limiter is retried on each scheduler turn
  (busy retry).
- **Key-value example core.** Built, but only partly as described.
  - In the top it has its own request, result and packet ports. It does not go through the
    queue and transport subsystems.
  - Its request port stands for the key-carrying WQE.
  - Values are written over the network with SET, since the reference describes only lookups.
  - The store is direct-mapped, with no collision chaining.
  - The reference caches values from host memory in a resource-subsystem cache of 256 × 1024
    bits. Here that memory is the whole store, on chip, so the lookup rate is never limited by
    the system bus.

## Simulating

Every testbench is self-checking. It prints `TB_RESULT checks=N failures=M` and has a watchdog.
With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv rtl/jz_pkg.sv \
          tb/tb_jingzhao_nic.sv --top-module tb_jingzhao_nic -o sim
./obj_dir/sim
```

| testbench | what it exercises |
|---|---|
| `tb_multi_queue` | random traffic on all queues against a reference model |
| `tb_dynamic_buffer` | insert, read, read-and-free and free of random packets; slot accounting |
| `tb_append_header`, `tb_remove_header` | random lengths and back-pressure, byte-exact output, beat counts |
| `tb_gather_data` | random alignments and lengths, byte-exact output |
| `tb_dma_engine` | several clients, completions in random tag order, write splitting |
| `tb_resource_subsystem` | hits, misses, out-of-order DMA, per-connection ordering, head-of-line freedom, write-through, delete |
| `tb_queue_subsystem` | round-robin between queues, ring wrap, cache hit, miss and cell take-over, throttling and release |
| `tb_transport_subsystem` | two SR and two GBN nodes over lossy links; exact in-order delivery; every recovery path occurs |
| `tb_sha256_core` | published SHA-256 vectors and random keys against a reference; 64-clock latency |
| `tb_key_value_core` | two cores back to back; GET/SET hits, misses and overwrites against a store model; service rate of 16 hash cores |
| `tb_kv_hash_scaling` | key-value GET rate with 1 to 32 hash cores; must follow N/64 per clock and double with N |
| `tb_jingzhao_nic` | the full-size NIC looped back over a lossy link (see below) |

`tb_jingzhao_nic` runs the top with every parameter at its default:
- It posts random multi-element WRITEs on seven QPs.
- It checks every destination byte against the source byte reached through MPT and MTT.
- It checks the PSN each QP context holds in host memory at the end.
- It fails if any of these mechanisms never occurred:
  - cache hit or miss in each cache;
  - throttling;
  - out-of-order DMA completion;
  - bus back-pressure;
  - link loss;
  - retransmission, timeout, NAK;
  - out-of-order storage;
  - receiver drop or duplicate.
- It loops the key-value packet ports back with random stalls, so the core serves its own
  SETs and GETs. It checks each answer, with exact hit, miss and set counts.

It takes about ten seconds.
