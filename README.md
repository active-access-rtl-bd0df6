# Active Access: an IOMMU that turns remote puts and gets into events

With remote memory access (RMA), a process reads and writes the memory of another node directly
through an RDMA NIC. The target's CPU never sees these accesses. That is what makes them fast,
but it also means the target cannot react to them. A distributed hash table illustrates the cost.
An insert that collides must be resolved with a chain of remote atomics and puts issued by the
source, because the owner of the table takes no part.

*Active Access* changes this. It adds a few bits to the page-table entries of the IOMMU, the unit
that already sits between every I/O device and main memory and translates every DMA address.
Those bits say, page by page, what happens to a remote put or get that touches the page:

* it may take effect in memory as usual, or not at all;
* its metadata, and optionally its data, is appended to an **access log**, a ring buffer in the
  memory of the process that owns the page.

A handler on the target CPU then drains the log. An insert into a remote hash table becomes one
put: the owner's handler does the insert locally. The same mechanism supports several other uses:

* counting accesses (statistics);
* tracking pages written remotely (incremental checkpointing);
* keeping a copy of the data remote gets read (fault-tolerance logging);
* "active flushes", which tell a source when its active accesses have been handled.

This repository holds synthesizable SystemVerilog for such an extended IOMMU, with a self-checking
testbench for every block and one for the whole unit. The design follows the published
description of Active Access (Besta and Hoefler, ICS 2015). That description stops at the level
of mechanisms, so many of the details below are this implementation's own choices. They are
marked as such.

## The extended page-table entry

A 4 KB page is mapped by a 64-bit leaf PTE, found through a root-entry table, a context-entry
table and a 4-level page table in memory, as in Intel VT-d.

| bits  | field | meaning |
|-------|-------|---------|
| 0     | R     | gets may read the page |
| 1     | W     | puts may write the page |
| 7     | WL    | log metadata of puts |
| 8     | WLD   | log metadata and data of puts |
| 9     | RL    | log metadata of gets |
| 10    | RLD   | log metadata and the data returned to gets |
| 51:12 | page  | physical page number |
| 61:52 | IUID  | IOMMU user domain: selects the access log |
| 63    | E     | a fault is recorded in an access log (1) or the legacy fault log (0) |

Three of these placements come from the published description: the 10-bit IUID in bits 52-61,
the four control bits in bits 7-10, and the existence of E. Three are this implementation's
choice: the order of WL, WLD, RL and RLD inside bits 7-10, R and W in bits 0 and 1, and E in
bit 63. The constants are in `aa_pkg`.

`aa_policy` turns the PTE and the direction of the access into actions. Let `perm` be W for a put
and R for a get. Let `log` be (WL or WLD) for a put and (RL or RLD) for a get:

* memory effect if `perm`; otherwise the access faults;
* an access-log record if `log` and (`perm` or E);
* data in that record if WLD (put) or RLD (get), but never for a blocked get, which reads nothing;
* a legacy fault-log entry if the access faults and E = 0.

Typical page settings:

| use | bits | effect |
|-----|------|--------|
| plain RMA | W=1 R=1 | normal DMA |
| active put (hash-table insert, remote queue) | W=0 WL=1 WLD=1 E=1 | memory unchanged, put logged with data |
| statistics, dirty tracking | W=1 WL=1 / R=1 RL=1 | access proceeds, metadata logged |
| logging gets | R=1 RL=1 RLD=1 | get proceeds, returned data copied to the log |
| legacy fault handling | W=0 WL=1 E=0 | blocked, entry in the system fault log, MSI |

The rule that non-faulting logged accesses always go to the access log, whatever E is, is this
design's reading. The published text gives the statistics and active-put settings without a
value for E.

## Access logs, and why records are reserved before they are written

Each access log is a ring in memory, described by one entry of the **access log table**
(`aa_log_table`). The table is a CAM of 32 entries holding (IUID, base, head, tail, size). The
IOMMU appends at the tail. The consumer (a handler, or a polling thread) reads from the head and
reports its progress by writing the new head. It can write it to the `LOG_HEAD` register, or to
its own scratchpad (below). One word always stays empty, so head == tail means the ring is
empty.

A record is:

```
word 0  [63:62] 0 = put, 1 = get   [61] data follows   [60] access faulted
        [57:48] IUID   [47:32] PCIe requester ID   [31:24] tag   [9:0] length in words
word 1  device address of the access
word 2… the data words (only with WLD / RLD), one per 8 bytes of the transaction
```

The hard part is that one put or get is a PCIe *transaction* of up to 4 KB. Its words arrive over
time, and transactions from different devices or tags can interleave word by word. If each word
were appended at the tail as it arrived, records would mix. Instead:

1. When the **first** word of a logged transaction arrives, the whole record is reserved at once:
   2 + length words, or 2 without data. The table keeps an internal reservation pointer `resv`,
   ahead of the tail visible to the CPU. The reservation is refused if the ring lacks room.
2. A **packet tag buffer** entry (`aa_tag_buffer`) is allocated under the transaction's
   (requester ID, tag). It remembers the log, the start of the record, the current write pointer
   and the record size. Every later word of the transaction looks itself up there and is written
   to its own slot.
3. When the record's last word has been written, the entry is marked complete.
4. A complete entry is **committed** only when its record starts exactly at the log's committed
   tail, that is, when every earlier record of the log is complete. Commit moves the tail over the
   record and frees the entry, one commit per cycle. A record that completes early waits behind
   the unfinished one: the CPU never sees a hole.

```
 reserve X     reserve Y     Y done        X done
 tail,resv     tail          tail          tail
 |             |             |             ----------------->|
 [X.......]    [X.......][Y....]  [X..  ][YYYYY]  [XXXXXXXX][YYYYY]
```

The CPU **scratchpad** (`aa_scratchpad`) is a small memory next to the CPU that both sides can
write, and it holds both pointers of every log. On each commit the IOMMU writes the new tail of
the log with table index *i* into word 2*i*. A thread polling there finds new records without
touching main memory. The CPU writes its head into word 2*i*+1. The scratchpad passes each such
write back to the log table one cycle later, so consuming records frees ring space without a
register write. Head and tail are the only means of synchronisation: no lock is shared between
the IOMMU and the CPU. The notifier (`aa_notifier`) may also raise an MSI for the log.
It does so on every *N*th record (default 10, the interval used in the published evaluation), or
when free space falls below a threshold. Both are set through the `NOTIFY` register. A captured
active flush can also request the interrupt (see below). If that request coincides with a
record-driven interrupt, it is held for one cycle in a one-entry slot.

**Backpressure.** If the record does not fit, or the tag buffer is full, the request word is
*parked*. `up_ready` then stays low, which is the point where PCIe flow control would stop the
NIC and, through a lossless network, the sender. While a word is parked the engine keeps
forwarding read completions and finishing flushes, because those are what let earlier
reservations complete. It retries the parked word once the consumer has moved the head.

## Active gets

A get is a read request followed, later, by completions from memory. Completions carry only the
requester ID, the tag and the low address bits, so they cannot be matched to a page. For a get to
an RLD page the record, and its tag-buffer entry, are created when the request passes. Each
completion flowing back to the NIC is then looked up by (requester ID, tag). Its data is copied
into the reserved record before the completion is forwarded. The NIC receives its data
unchanged. A get to a page with R = 0 is answered with one completion carrying the
unsupported-request status (`ur`).

## Active flushes

The OS registers a *flushing page* (a device address reserved for this purpose) and the IUID it
guards in the **flushing buffer** (`aa_flush_buffer`). This is a CAM of
(page, IUID, active, requester ID, tag). A source that wants to know that its active puts have
been handled issues a get to that page. The IOMMU does not pass the get to memory. It sets
`active` and stores the get's requester ID and tag. If the guarded log still holds records, the
IOMMU also raises that log's interrupt at once, so the CPU starts draining it without waiting for
the next interval. Where the consumer polls instead, the interrupt can simply be ignored. The
entry then waits until that IUID's log is drained, meaning head == tail with nothing reserved.
The IOMMU then sends the completion, which finishes the source's get.

## Legacy fault log

A fault on a page with E = 0 is handled the standard way (`aa_fault_log`). A 2-word entry (the
record header with the fault bit, and the address) goes into a single system-wide ring, and an
MSI is raised. The access's data is discarded. When the ring is full the entry is dropped, the
sticky `fault_overflow` flag is set and `fault_dropped` counts it.

## Translation

`aa_ctx_cache` maps a requester ID to the root of its page table: 8 entries, fully associative,
filled round-robin. `aa_iotlb` maps (requester ID, device page) to the complete leaf PTE. It has
64 entries, fully associative with true LRU. The published IOTLB study found fully associative LRU
the best of the organisations it tried. On a miss, `aa_walker` reads the root entry (indexed by
bus number), the context entry (indexed by device/function) and four page-table levels (9 address
bits each). It uses a dedicated one-word read port. Entries here are a single 64-bit word each:
bit 0 of a root or context entry means present, and bits 63:12 point to the next table. A missing
entry yields PTE = 0, so the access faults.

Superpages are walked too. An entry at the second or third level with bit 7 (page size) set ends
the walk as a 1 GB or 2 MB page. The walker returns the 4 KB entry of the page being accessed, so
the IOTLB and the rest of the unit only ever see 4 KB pages. The Active Access bits collide with
superpages: bits 7-10 are free only in a 4 KB leaf entry, and in a superpage entry bit 7 is the
page-size bit. The walker therefore clears bits 7-10 of a superpage. A superpage is never logged,
but its R, W, IUID and E still apply.

## The engine and its timing

`aa_iommu` contains one sequencer that handles one 64-bit word ("beat") at a time. On each pass it
picks one input, in this priority:

1. a finished flush, whose completion goes to the NIC;
2. a read completion from memory, which is logged if needed and forwarded;
3. a parked request word, which is retried;
4. a new request word from the NIC.

A request word then goes through these steps:

```
REQ    flushing-page check (gets)
XLATE  context cache + IOTLB            -> on a miss WALK (6 or 4 table reads)
ACT    policy; first word: reserve record + tag-buffer entry, or park
HDR0/1 write the record header          (first word of a logged transaction)
FLT0/1 write a legacy fault entry       (first word of a faulting E=0 access)
MEM    the access itself: write, or read request of `len` words; UR completion if blocked
LDATA  write the data word into the record
FIN    mark the record complete         (last word)
```

Each step that uses the memory port waits for `mem_req_ready`. Steps that do nothing cost one
cycle. A word of a plain put with an IOTLB hit therefore takes about 10 cycles. The published
work gives no cycle-level rates for the IOMMU: its 5 ns and 70 ns figures are settings of its
simulations. This engine is written for clarity, not throughput. Pipelining it is the obvious
next step.

## Interfaces

All ports are plain signals or packed structs from `aa_pkg`.

* `up_*` carries request beats from the NIC, as `tlp_t`. Each beat has `kind` (write or read),
  `req_id`, `tag`, `addr`, `len`, `first`, `last` and `data`. `first` and `last` mark the ends of
  the whole transaction, and `len` is its size in 8-byte words (at most 512, i.e. 4 KB).
* `dn_*` carries completions to the NIC.
* `mem_req_*` and `mem_rsp_*` form the memory port. A request is one written word, or a read of
  `len` words. Responses come back in order, one word per beat, with the requester ID and tag.
* `pt_rd_*` and `pt_rsp_*` are the table-walk read port.
* `cfg_we`, `cfg_addr` and `cfg_wdata` form the register-write port. The register map is in the
  header of `rtl/aa_iommu.sv`. Access logs and flushing pages are programmed through staging
  registers followed by a command write.
* `msi_fault`, `msi_log` and `msi_log_iuid` are interrupt-request pulses for an interrupt
  controller outside this unit.
* `sp_*` is the CPU port of the scratchpad: word 2*i* holds the tail of log *i*, and word 2*i*+1
  its head. Reads have one cycle of latency.

Default parameters of `aa_iommu`:

* `LOGS = 32` (one access log per process; the published evaluation ran 32 processes per node);
* `TAGS = 32` tag-buffer entries;
* `FLUSH_ENTRIES = 32`;
* `TLB_ENTRIES = 64`;
* `CTX_ENTRIES = 8`;
* `INTERVAL = 10`.

The scratchpad has 2 × `LOGS` words.

Only `INTERVAL` is a published number. The others are this design's choices.

## Where this departs from, or goes beyond, the published description

* **Head and tail.** The published hardware description has the IOMMU advance the tail. Its
  example handler consumes "at the tail" and compares it with the head. This design follows the
  hardware description: the producer owns the tail and the consumer owns the head.
* **The reservation pointer.** The separate reservation pointer, the one-empty-slot rule, the
  record format and the register map are all this design's.
* **Tag buffer use.** The tag buffer holds every logged transaction, not only RLD gets. This is
  what the published text's handling of interleaved transactions implies.
* **Lock-based synchronisation.** The alternative way for the IOMMU and the CPU to synchronise,
  a lock, is not built. Synchronisation is through the pointers only, in the log table and
  mirrored in the scratchpad.
* **Not modelled.** PCIe packet framing, TLP headers and credits are not modelled: a transaction
  is a stream of beats. Root and context entries are one 64-bit word rather than the 128 bits of
  real VT-d entries. Invalidation is global (`INVALIDATE`).
* **Superpages.** They cannot carry the logging bits, so a superpage is a plain, never-logged page.
* **Outside this unit.** The NIC, main memory, the CPU and its handlers, the interrupt controller
  and the PCIe link are not part of this design. The testbenches stand in for them.

## Simulating

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<n>`. For example, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/aa_pkg.sv tb/tb_aa_iommu.sv \
          --top-module tb_aa_iommu -Mdir obj && obj/Vtb_aa_iommu
```

Replace `tb_aa_iommu` with any other `tb_*` to run one block's testbench.

`tb_aa_iommu` runs the whole unit at its default parameters. `tb/aa_mem_model.sv` is a
behavioural memory with random back-pressure on its request port. The testbench builds real
remapping tables in that memory and programs three access logs, a small fault log and a flushing
page. It then exercises:

* plain puts;
* an active put;
* two active puts interleaved word by word;
* statistics puts and gets;
* an active get;
* three legacy faults, the third of which is dropped;
* a blocked get;
* an active flush, which is held until its log is drained;
* a 64-byte log that fills up, parks the NIC, and wraps around once the consumer frees it by
  writing its head into the scratchpad;
* a put to a 2 MB superpage whose bits 7-10 are set, which must be written but not logged.

It compares every log word, memory word and completion with values it computes itself. It also
checks that each mechanism occurred at least once: table walks, IOTLB and context-cache hits, a
parked word, a record waiting behind a hole, log interrupts, a flush that raises its log's
interrupt, a head reported through the scratchpad, and a superpage walk.

`tb_aa_workloads` also runs at the default parameters. It loads the unit with the traffic of the
applications Active Access targets, for 32 processes, each owning one access log:

* distributed hash-table inserts, as one-word active puts;
* counted puts and gets on statistics pages;
* logged gets of 1 to 16 words, plus full 4 KB gets, as in a fault-tolerant sort.

The traffic is 1500 random operations from two requester IDs. It includes bursts to one process
that overflow its 512-byte log. The 64-entry IOTLB cannot hold the 192 pages in use, so table
walks are frequent. A CPU model runs the handlers concurrently. Each handler polls its tail in
the scratchpad and pays 30 cycles per record. It checks each record word by word, inserts the
elements into a hash-table model and counts accesses. It then writes its head back to the
scratchpad. At the end the test checks:

* each hash table holds exactly what was inserted;
* the access counts match;
* active-put pages in memory were never written;
* every get returned the right data;
* each log raised one interrupt per 10 records;
* the NIC was parked at least once;
* every log wrapped.

The block testbenches check:

* the policy, exhaustively over all bit combinations;
* the IOTLB's LRU order against a reference list;
* table walks over hand-built tables, including missing entries;
* ring wrap-around and the free-space arithmetic;
* in-order commit behind an incomplete record;
* flush completion only after the log drains;
* fault-log overflow;
* notifier intervals and thresholds;
* scratchpad write priority and head forwarding.
