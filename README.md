# ORCA key-value accelerator in SystemVerilog

ORCA offloads microsecond-scale server work, such as a key-value store, from
the CPU to an accelerator. The accelerator sits on the CPU's cache-coherent
interconnect (UPI or CXL.cache), and clients reach it over ordinary one-sided
RDMA. The RDMA NIC stays a stock part. It writes client requests into host
memory. The accelerator learns of each write through the coherence protocol
rather than by polling. It serves the request with coherent loads and stores,
and sends the reply by posting RDMA work requests to the NIC itself. The CPU
is needed only for set-up and for polling completion queues now and then.

This repository holds synthesizable RTL for that accelerator in its
key-value configuration. It also has the NIC-side TPH knob that ORCA proposes
for NVM-aware DDIO, the per-key lock unit of its transaction configuration,
and self-checking testbenches for every block and for the whole design. It follows the ORCA paper (Yuan et al., "ORCA: A Network and
Architecture Co-design for Offloading µs-scale Datacenter Applications").
The authors did not write it. Where the paper names a function without
describing its logic, this design makes its own choices, and the sections
below say which.

## The request path

```
 client RDMA write ─► request ring (host memory)
 client RDMA write ─► 4-byte tail pointer in the pointer buffer
                           │ coherence signal (snoop of the written word)
                           ▼
 coh_ctrl ── cpoll_checker ─► cpoll_queues ─► rr_scheduler ─► ring_tracker
    ▲                                                              │ {ring, first index, count}
    │ coherent reads/writes (tagged, out of order)                 ▼
    ├──────────────────────────────────────────────────────── kv_apu
    │                                                              │ response record
    └──────────────────────────────────────────────────────── sq_handler
                          WQE writes, sfence, doorbell MMIO ─► RNIC
```

### cpoll: learning of new requests without polling

Software registers one memory region as the *cpoll region*. The accelerator
keeps that region in its coherent cache. When a client's RDMA write changes a
word in the region, the coherence protocol has to take the line away from the
accelerator, and the controller sees the address and the new data. This snoop
arrives on the `snp_*` port of `orca_top`. `cpoll_checker` turns it into
{ring, new tail}. There are two modes:

* **Pointer-buffer mode** (`ptr_mode=1`, the default in the tests). The region
  is an array of 4-byte tail pointers, one per ring. The ring is `offset/4`,
  and the new tail is the written value.
* **Direct mode** (`ptr_mode=0`). The region is the request rings themselves,
  1024 lines of 64 bytes per ring. The ring is `offset/65536` and the new tail
  is the written entry plus one.

Signals can arrive faster than rings are served. Each ring therefore has a
4-entry queue (`cpoll_queues`). When the queue is full, the newest entry is
overwritten. Nothing is lost, because a later tail covers all the earlier
requests; this is the coalescing the paper relies on. `rr_scheduler` picks
rings round-robin. `ring_tracker` keeps the last tail it has seen for each
ring. It emits "count = (new − old) mod 1024 requests, starting at old".

### The key-value APU and its outstanding-request table

`kv_apu` is the hardest part of the design. Host memory is several hundred
cycles away, so the APU has to keep many requests moving at once. It holds up
to 256 requests in flight, the number given in the paper.

Each request holds a tag from a free pool, and every memory request carries
that tag. The outstanding-request table (ORT) is indexed by the tag. It holds
the request's state and everything later steps need: connection, opcode, key,
value, key tag, bucket address, bucket copy and item pointer. A memory
response can arrive in any order. It looks up its ORT entry, performs one step
of that request's state machine, and may issue the next memory access. The
paper keeps the table in a TCAM or a cuckoo hash; a direct index is enough
here because the tag comes back with every response.

One request goes through these steps:

1. Read the 64-byte request entry: `op[7:0]`, `key[71:8]`, `value[455:72]`.
   An unknown opcode is answered with `ST_BAD_OP`.
2. Hash the key. `hash_unit` is a 3-stage MurmurHash3 `fmix64` pipeline.
   * Bits `[31:0] & bucket_mask` select the bucket.
   * Bits `[63:49]` are the 15-bit key tag stored in the slot.
3. Read the bucket. A bucket is one line with seven slots
   `{valid, tag[14:0], ptr[47:0]}`. Slot 7 is a link to the next bucket of a
   chain.
   * On a tag hit, read the item (GET) or overwrite it (PUT).
   * With no hit and a link present, follow the link.
   * With no hit and no link:
     * a GET answers `ST_NOT_FOUND`;
     * a PUT takes a 64-byte slot from `slab_alloc`, writes the item there,
       and writes the bucket back with a free slot filled in.
   * If the bucket is full, the PUT first writes a new bucket, then writes
     the old bucket with its link set.
4. A GET's item line holds `key[63:0]` and `value[447:64]`. The key is
   compared, so a tag alias reads as a miss.

A GET takes three memory accesses, an insert four, and an update of an
existing key three. These counts match the paper and are checked by the
testbenches. In direct mode, a finished request first writes its ring
entry back to zero, which costs one more write. The accelerator's cache then
owns that line again, so the next client write to it raises a new coherence
signal.

Three sources compete for the single memory request port. In priority order:

1. responses being processed;
2. keys leaving the hash pipeline;
3. new requests being issued from the ring.

A finished request does not hand its result straight to the output. Its tag
goes into a completion queue with room for all 256 tags. The tag is released
only when the response record leaves for the send-queue handler. This keeps
memory responses from ever waiting for the send-queue handler.

That matters because both units share one response channel. Without the
completion queue, a deadlock was observed in simulation:

* the send-queue handler waited for a write acknowledgement before ringing
  its doorbell;
* that acknowledgement sat behind a memory response for the APU;
* the APU could not take that response, because its output was still
  waiting for the send-queue handler.

Two limits are deliberate. The APU does not serialise two concurrent inserts
into the same bucket, because keys are assumed to be partitioned among
clients as in MICA; the end-to-end test issues inserts one at a time. The
slab is a bump allocator with a single 64-byte size class.

### Sending responses: the send-queue handler

`sq_handler` turns each response record into an RDMA WRITE work-queue entry
(WQE). The WQE goes into the connection's send queue in host memory. Its
remote address is the next entry of the client's response ring,
`resp_base[qp] + 64·tail`, and the server keeps that tail.

The WQE layout is this design's own. It is two lines: a control segment and
the response inline.

| Line | Bits | Field |
|---|---|---|
| 0 | `[7:0]` | opcode 0x08 |
| 0 | `[8]` | signaled |
| 0 | `[9]` | inline |
| 0 | `[31:16]` | WQE index |
| 0 | `[39:32]` | queue pair |
| 0 | `[95:64]` | length |
| 0 | `[159:96]` | remote address |
| 0 | `[191:160]` | rkey |
| 1 | `[7:0]` | valid |
| 1 | `[15:8]` | status |
| 1 | `[23:16]` | op |
| 1 | `[87:24]` | key |
| 1 | `[471:88]` | value |

Doorbells are batched. After 32 WQEs on a queue pair (the batch size the
paper evaluates), the handler:

1. issues an `sfence`;
2. waits until every earlier write is acknowledged;
3. writes `{qp, producer count}` to `db_addr + 8·qp` as an MMIO write.

A queue pair with a partial batch is flushed the same way after 64 idle
cycles. Every 32nd WQE is signaled, so the NIC produces few completions.

### Coherence-controller front end and configuration

`coh_ctrl` does three things:

* It merges the APU (port A) and the send-queue handler (port B) onto one
  request channel, round-robin. The port number travels in the tag's MSB and
  steers each response back.
* It translates read and write addresses with a fully associative 8-entry
  TLB of 2 MB pages, loaded by software. A miss is counted and the address is
  passed through unchanged.
* It hosts the cpoll checker on the snoop path.

The coherence protocol engine and the 64 KB local cache are vendor IP on the
paper's FPGA prototype and are not part of this RTL. Instead, the top level
exposes a plain request/response/snoop interface.

`conf_regs` is the register file host software writes at start-up, through
`cfg_we/cfg_addr/cfg_wdata`:

| Address | Contents |
|---|---|
| `0x000` | `{ptr_mode, enable}` |
| `0x001` | cpoll base |
| `0x002` | cpoll size |
| `0x003` | request-ring base |
| `0x004` | table base |
| `0x005` | bucket mask |
| `0x006` | slab base |
| `0x007` | slab size |
| `0x008` | send-queue base |
| `0x009` | doorbell address |
| `0x100+i` | response-ring base of connection i |
| `0x200+i` | rkey of connection i |
| `0x300+2k` | TLB entry k: `{valid[63], vpn}` |
| `0x301+2k` | TLB entry k: `ppn` |

### NVM-aware DDIO: the TPH knob

`tph_tagger` models the one NIC change ORCA asks for. DDIO is switched off
globally. For each DMA write, the NIC sets the PCIe TLP-processing-hint bit
(bit 16 of header DW0) only when the target address lies in a region
registered as DRAM. Such writes land in the last-level cache. Writes to NVM go
straight to memory, which avoids the random evictions that waste NVM's
256-byte access granularity.

The tagger shares no signal with the accelerator. `orca_top` carries it on
separate `tph_*`/`tlp_*` ports so that the whole design is one hierarchy.

### Transactions: the per-key lock unit

In ORCA's transaction configuration, only one outstanding transaction may
hold a given key-value pair. Other transactions that want the pair wait, in
order of arrival. `tx_cc_unit` does that bookkeeping:

* The 64-bit key is XOR-folded to one of 64 lock entries.
* A free entry is granted at once.
* An acquire of a held entry joins that entry's FIFO. The FIFOs are linked
  lists in a shared pool of 64 waiter nodes.
* A release hands the entry straight to the first waiter, or frees it if
  there is none.
* Keys that fold to the same entry share its lock. They are serialized
  together, which is safe but can cause false conflicts.

The rest of the transaction APU (redo logs in NVM and chain replication to
replicas) is not built. `orca_top` therefore exposes the unit on its own
`tx_*` ports.

## Parameters

| Parameter | Default | Origin |
|---|---|---|
| Entries per request ring (`RING_ENTRIES`) | 1024 | paper |
| Outstanding requests (`MAX_OUTSTANDING`) | 256 | paper |
| Pointer entry | 4 B | paper |
| Line size | 64 B | paper |
| Doorbell batch (`DB_BATCH`) | 32 | paper |
| Rings / queue pairs (`NUM_BUFS`) | 16 | own choice; the paper's tests use 10 clients |
| cpoll queue depth | 4 | own |
| TLB entries | 8 | own |
| `SIGNAL_EVERY` | 32 | own |
| `DB_TIMEOUT` | 64 cycles | own |
| TPH regions | 8 | own |
| TX lock entries / waiters | 64 / 64 | own |

## Where it departs from the paper

* **The ORT is indexed by tag.** The paper keeps the outstanding-request
  table in a TCAM or a cuckoo hash. Here a tag that travels with every
  memory request indexes the table directly.
* **A completion queue stands between the APU and the send-queue handler.**
  This is not in the paper. It is needed so that the shared response channel
  cannot deadlock.
* **Request entries are reset only in direct mode.** In pointer-buffer mode
  the rings are not the cpoll region, so the entries are left as they are.
* **cpoll queues coalesce the signals they hold.** A full queue also folds
  its newest entry into the latest one. The paper's coalescing happens in the
  coherence protocol itself, and the ring tracker makes both safe.
* **TLB misses pass through.** A miss is counted and the address passed on
  untranslated, because the paper does not describe a page walk.
* **Formats are this design's own.** That covers the request, item, bucket
  and WQE formats, the register map and the doorbell value.

## What is not here

* **The coherence protocol engine and local cache.** They are platform IP.
  They are replaced by the request/response/snoop ports.
* **The NIC, the interconnect PHY and the host CPU.** The testbenches use a
  behavioural host-memory model (`tb/host_mem_model.sv`). It gives random
  latency, out-of-order responses, random back-pressure and a doorbell log.
* **The transaction APU apart from its lock unit, and the recommendation
  (ORCA DLRM) APU.** The paper describes them only by function, and they are
  not built.
* **Serialising inserts into the same bucket, deletes, and a slab with more
  than one size class.**

## Simulating

All testbenches are self-checking. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
  rtl/orca_pkg.sv tb/tb_orca_top.sv --top-module tb_orca_top -o sim
./obj_dir/sim
```

Substitute any `tb_<block>` for the testbench.

`tb_orca_top` runs the full design at its default sizes. It uses ten clients,
a four-bucket table (so chains form), a TLB mapping for the rings, and memory
latency of 300–600 cycles. The run has four phases: inserts, reads (with one
pointer update per request so the queues coalesce), updates, and reads
again. It checks:

* every response written to the send queues;
* that the last doorbell of each queue pair covers all of that pair's WQEs;
* that each mechanism happened at least once, counted by the design's
  counters: coherence signals, coalescing, full ORT, 256 requests in flight,
  port stalls, chain walks and new links, TLB hits and misses, batched and
  timed-out doorbells, signaled WQEs, TPH set and cleared, and TX lock
  conflicts and hand-offs.
