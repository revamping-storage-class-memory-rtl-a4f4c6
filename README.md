# HAMS: a hardware memory-over-storage controller

A load/store CPU normally sees only DRAM. Storage sits behind a block
layer, a file system and `mmap`. That software path is slow, and it is
slower still when the storage is an ultra-low-latency SSD (ULL-Flash),
whose microsecond reads are lost in the kernel. HAMS moves the whole
job into the memory controller hub.

The MMU sees one flat, 64-bit, byte-addressable *memory-over-storage*
(MoS) space backed by the ULL-Flash. An NVDIMM on the DDR4 bus is a
direct-mapped, inclusive page cache of that space. On a miss, the
controller itself builds NVMe commands, manages the queues and moves
pages, with no software involved.

This RTL implements the *advanced* organisation. The ULL-Flash sits on
the same DDR4 bus as the NVDIMM. It takes commands through a small
register interface rather than PCIe doorbells. It moves pages straight
to and from the NVDIMM while HAMS lends it the bus.

Both operating modes are one input:

- **Persist mode** (`persist = 1`): one NVMe command in flight, each with
  Force Unit Access set. Every update reaches flash before the next.
- **Extend mode** (`persist = 0`): up to 16 commands in flight.

## The pieces

```
            MMU (8-byte loads/stores, tagged with an id)
                 |
         +-------v--------+   io (fill/evict)   +-------------------+
         | hams_addr_     |-------------------->| nvme_queue_engine |
         | manager        |<--------------------| SQ tail, limit,   |
         | tag check,     |   completion        | CQ, journal,      |
         | clone, wait    |                     | recovery          |
         | queue          |                     +----+---------+----+
         +-------+--------+                          |         |
                 |            +-------------+        |         |
                 |            | ssd_cmd_gen |<-------+         |
                 |            +------+------+                  |
                 |  line requests    |                         |
                 +-------------+     |     +-------------------+
                          +----v-----v-----v----+
                          |      mem_arb        |
                          +---------+-----------+
                                    |
     lock_register -- hold -->  ddr_mem_ctrl  --> DDR4 pins: NVDIMM and ULL-Flash
```

Every block talks to memory in whole 64-byte lines, one DDR4 burst of
8 × 8 bytes. Only `ddr_mem_ctrl` drives pins. The other blocks describe
*what* to read or write, and a round-robin arbiter (`mem_arb`) shares
the controller among them.

| file | role |
|---|---|
| `rtl/hams_pkg.sv` | widths, NVDIMM memory map, NVMe opcodes, request structs, command pack/unpack |
| `rtl/hams_addr_manager.sv` | cache logic: tag check, hits, miss handling, busy bit, replay |
| `rtl/wait_queue.sv` | FIFO used for parked requests and for buffered completions |
| `rtl/nvme_queue_engine.sv` | SQ/CQ management, outstanding limit, journal tags, power-up recovery |
| `rtl/ssd_cmd_gen.sv` | builds the 64-byte NVMe command, writes it to the SQ and to the ULL-Flash |
| `rtl/mem_arb.sv` | round-robin sharing of the memory controller |
| `rtl/ddr_mem_ctrl.sv` | DDR4 command sequences, ULL-Flash register writes, bus hand-over |
| `rtl/lock_register.sv` | who owns the DDR4 bus: HAMS or the ULL-Flash |
| `rtl/hams_top.sv` | wires all of the above; the top |

## Address space and the cache

A MoS byte address splits into three fields. At the default 4 KB pages
and 2^20 frames:

```
 63                    32 31                 12 11          0
+------------------------+---------------------+-------------+
|     tag (32 bits)      |  index (20 bits)    | offset (12) |
+------------------------+---------------------+-------------+
```

The index picks one cache frame, a page-sized slot of the NVDIMM at
`index × PAGE_BYTES`. The tag says which flash page the frame holds.
A frame can hold only one of the pages that share its index (direct
mapping), so the tag check is one comparison.

### The tag-array entry lives in the NVDIMM

The controller has no SRAM tag array. An SRAM array big enough for
millions of frames would be large, and it would be lost on power
failure. Instead, each frame has an 8-byte metadata word in the NVDIMM:

| bits | field |
|---|---|
| 47:0 | tag |
| 48 | D: dirty, page differs from flash |
| 49 | V: valid |
| 50 | B: a fill of this frame is in flight |
| 51 | E: the evict of the page this frame held is in flight |
| 63:56 | spare (ECC byte in a real module) |

The frame is *busy* while B or E is set.

Eight words share a 64-byte line. Every request therefore starts with
one line read of its metadata. The words sit in a region of their own
(`META_BASE`, 4 GB) rather than in ECC lanes next to the data, because
the bus here is a plain 64-bit DDR4 data bus.

### One request, step by step

1. **Metadata read.** The manager reads the line holding the frame's
   word and compares the tag.
2. **Busy.** If B or E is set, a page of this frame is being moved. The request goes to
   the wait queue untouched. Nothing else is started, so a second
   request to the same frame never causes a second eviction.
3. **Hit, read.** The manager reads the 64-byte data line and returns
   the addressed 8 bytes with the request's id.
4. **Hit, write.** The manager writes the line with an 8-bit byte mask
   placed at the right word. If D was clear, it writes the metadata with
   D = 1 before it answers.
5. **Miss, dirty victim.** The victim page must reach flash, but the
   frame is about to be overwritten by the fill. The manager waits for a
   free NVMe slot. It then copies the victim page, line by line, into
   that slot's page of the *PRP pool* in the pinned NVDIMM region, and
   sends an evict command (NVMe write) whose data pointer (PRP) is the
   copy. The ULL-Flash can then take its time; the frame is free at
   once.
6. **Miss, any victim.** The manager writes the new tag with V = 1,
   D = 0, B = 1, and E = 1 if an evict was sent. It sends a fill command
   (NVMe read) into the frame and parks the request in the wait queue.
   Clean victims are simply dropped.
7. **A command completes.** The NVMe engine reports the finished
   command and its frame. The manager clears B for a fill or E for an
   evict. It then replays every request that was in the wait queue at
   that moment, in order. A replayed request
   goes through step 1 again. It now hits, or it parks again behind
   another busy frame. The order of requests to any one frame is kept.

Keeping the frame busy until the evict has also finished matters. The
ULL-Flash may complete commands in any order. Without E, a request for
the evicted page could miss, and its fill could then read the page from
flash before the write-back landed.

Priority inside the manager is: completions first, then replays, then
new MMU requests. A write miss also fills the page first, because the
rest of the page must be correct before 8 bytes of it are changed.

## NVMe without software

### Commands

`ssd_cmd_gen` turns a fill or evict request into a standard 64-byte NVMe
I/O command:

| field | value |
|---|---|
| opcode | 0x02 read (fill) or 0x01 write (evict) |
| command id | SQ slot |
| NSID | 1 |
| PRP1 | NVDIMM address: the frame for a fill, the PRP-pool copy for an evict |
| SLBA | flash page × (page size / 4 KB) |
| NLB | page size / 4 KB − 1 |
| FUA | dword 12 bit 30, set in persist mode |
| journal tag | dword 2 bit 0 (a reserved dword) |
| frame number | dword 3 (a reserved dword) |

The generator first writes the command into its SQ slot in the NVDIMM.
It then sends the same 64 bytes to the ULL-Flash as a register write
(see below). That register write takes the place of the doorbell.

### Queues and the outstanding limit

`nvme_queue_engine` owns the SQ tail. A command's id is its SQ slot,
and the same slot number selects its PRP-pool page. A slot stays busy
until its completion, so an evict's copy cannot be overwritten while
the ULL-Flash still reads it.

Issue stops while the count of outstanding commands has reached the
limit. The limit is `MAX_OUT` = 16 in extend mode, which is what the
ULL-Flash can serve, and 1 in persist mode. `slot_free` tells the
manager ahead of time that a slot is available, so the manager never
copies a page and then has to wait with it.

The ULL-Flash reports each finished command with an interrupt carrying
its id. Completions may arrive in any order. The engine keeps the ids
in an on-chip CQ ring and handles them in arrival order, one at a time:

1. It clears the command's journal tag in the SQ entry with a masked
   write of dword 2.
2. It frees the slot.
3. It reports the frame and the fill/evict flag to the manager.

Completions take priority over new issues.

### Journal and power-up recovery

Every command is written with journal tag 1, and the tag is cleared
only after the command has completed. The SQ lives in the
battery-backed NVDIMM. After a power failure, then, the SQ records
exactly which commands may not have been carried out.

A pulse on `recover_start` after reset makes the engine:

- start a fresh, empty SQ/CQ pair;
- read all `SQ_DEPTH` old entries;
- re-issue each entry with journal tag 1 at the new tail (the
  outstanding limit does not apply here);
- clear the tag of the old copy whenever the command moved to another
  slot.

`recovered` counts the re-issued commands. Their completions later go
through the normal path, so a fill that was cut off clears its busy bit
and releases the requests parked on it.

## Sharing one DDR4 bus with the SSD

### Register interface

To send a command, `ddr_mem_ctrl` does three things in order:

1. It holds both chip selects high for one cycle.
2. It issues a WR (RAS# high, CAS# low, WE# low) with the ULL-Flash's
   CS# low and A = 0.
3. It drives the 8 × 8-byte command on D[63:0] in the next 8 cycles.

The NVDIMM never sees it. This takes 11 cycles in total.

### Lock register

A page moves between the NVDIMM and the ULL-Flash directly over the
shared bus, with the ULL-Flash as bus master. The hand-over works like
this:

1. The ULL-Flash asks with `ull_lock_req`.
2. From that moment the memory controller starts nothing new.
3. Once it is idle, `lock_register` sets the lock.
4. The ULL-Flash moves the page and releases the lock through its lock
   pin (`ull_lock_release`). The release wins over a new request in the
   same cycle.
5. Only then does HAMS use the bus again.

An assertion in `hams_top` checks that no chip select or command comes
from HAMS while the lock is set.

### DDR4 sequencing

`ddr_mem_ctrl` uses a closed-page policy: ACT, tRCD, RD or WR, the
8-beat burst, PRE, tRP. The address fields are:

- column = addr[12:3]
- bank = addr[16:13]
- row = addr[32:17]

The default timings are DDR4-2133 class: tRCD = CL = tRP = 15 and
CWL = 11 cycles. For a read:

- read beat *k* is sampled CL + *k* cycles after the RD command;
- the `done` pulse comes T_RCD + T_CL + T_RP + 9 cycles after the
  request was accepted.

For a write, beat *k* is driven CWL + *k* cycles after the WR command,
with DM marking the bytes not to write.

There is no refresh. An NVDIMM model that needs refresh would need it
added.

## NVDIMM memory map (8 GB, 33-bit address)

| range | contents |
|---|---|
| 0 – 4 GB | cache frames (2^20 × 4 KB) |
| 4 GB – | metadata words (8 B per frame) |
| 7.5 GB + 0 | SQ, 512 × 64 B |
| 7.5 GB + 32 KB | CQ area (reserved; the CQ ring is kept on chip) |
| 7.5 GB + 40 KB | MSI table area (reserved) |
| 7.5 GB + 1 MB | PRP pool, one page per SQ slot |

The top 512 MB is the pinned region, which the MMU cannot reach.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `PAGE_BYTES` | 4096 | page = NVMe transfer = cache frame size |
| `INDEX_BITS` | 20 | log2 of the number of frames |
| `SQ_DEPTH` | 512 | SQ entries, also PRP-pool pages |
| `MAX_OUT` | 16 | outstanding NVMe commands in extend mode |
| `WQ_DEPTH` | 16 | wait-queue entries |
| `T_RCD`, `T_CL`, `T_CWL`, `T_RP` | 15, 15, 11, 15 | DDR4 timings in clock cycles |

`PAGE_BYTES` may be any power of two from 64 bytes up. Two limits
apply, and both are checked by assertions:

- The cache (`PAGE_BYTES` × 2^`INDEX_BITS`) must end below the
  metadata region at 4 GB.
- The tag (64 − log2 `PAGE_BYTES` − `INDEX_BITS` bits) must fit in
  48 bits.

`PAGE_BYTES = 131072` with `INDEX_BITS = 15` gives the 128 KB pages of
the system the design was evaluated on, with the same 4 GB of cache.
`tb_hams_page128k` runs that configuration.

`SQ_DEPTH` also sets the length of the recovery scan: one line read per
SQ entry.

## Where this design chooses for itself

These points are this RTL's decisions, not details of the original
design:

- **Page size.** The NVMe length field of the original design is 4 KB,
  while its simulated system used 128 KB pages. The default follows the
  4 KB NVMe payload.
- **Metadata region.** Metadata sits in its own region instead of in
  ECC bits beside each line. A lookup therefore costs one extra line
  read.
- **Cache size.** The cache is 4 GB, a power of two, instead of all
  ~7.5 GB not pinned.
- **Wait queue.** The wait queue is an on-chip FIFO, not a queue in the
  pinned region. Its contents are lost on power failure, like the MMU's
  own outstanding requests.
- **Completion queue.** The CQ is an on-chip ring of command ids.
- **Busy bit.** It is kept as two bits, one per command (B for the
  fill, E for the evict, E in a spare bit of the word). The frame is
  busy while either is set.
- **Interrupts.** The completion interrupt is a side-band pulse with the
  command id, not a write into an MSI table in the pinned region.
- **Requests.** MMU requests are 8 bytes with a byte mask and an 8-bit
  id. Responses can come back out of order, because parked requests are
  answered later.
- **Lock hand-over.** How the ULL-Flash asks for the bus (`ull_lock_req`)
  is an assumption. The original design only says HAMS sets the lock
  once the flash side is ready.
- **DDR4 details.** Timings, address mapping, no refresh, and the beat
  timing of the register write are assumptions.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_lock_register` | random requests against a reference model |
| `tb_wait_queue` | random push/pop, including push on full with pop, against a queue model |
| `tb_ddr_mem_ctrl` | masked line writes and reads against a DDR model; the exact read latency; the framing of the ULL-Flash register write; that `hold` blocks new work |
| `tb_ssd_cmd_gen` | every command byte, at offsets written out independently; the SQ address; order of the SQ write, register write and `cmd_done` |
| `tb_nvme_queue_engine` | outstanding limit in both modes; out-of-order completions; journal tags cleared before report; recovery of three in-flight commands |
| `tb_hams_addr_manager` | a fake NVMe engine and flash: read data, no double fills, evicted data current, all events seen |
| `tb_hams_top` | the whole controller; see below |
| `tb_hams_full` | the top at default parameters; see below |
| `tb_hams_workloads` | the evaluated workloads' access patterns; see below |
| `tb_hams_page128k` | the top with 128 KB pages and 15 index bits, same sequence as `tb_hams_full` |

`tb_hams_top` runs the whole controller with small pages and queues.
It uses behavioural models of the NVDIMM (`tb/nvdimm_model.sv`) and of
the ULL-Flash (`tb/ull_flash_model.sv`). The ULL-Flash model has random
latency, out-of-order completion, real DMA under the lock, and a
power-fail input. The test runs in four phases:

1. thousands of random reads and writes in extend mode;
2. persist mode;
3. a power failure with an evict and a fill in flight, then recovery;
4. a final read-back of every written word.

It fails if any of these never happens: hit, miss, dirty eviction,
parking, replay, outstanding-limit stall, lock hand-over, out-of-order
completion, FUA or recovery. It also fails if HAMS touched the bus
while locked.

`tb_hams_full` instantiates `hams_top` with no parameter overrides:
4 KB pages, 2^20 frames and DDR4-2133 timing. It takes a cold miss, hits,
a dirty eviction with the page coming back from flash, parking and
replay on one frame, and persist mode through the controller. It also
uses the frame and the tag at the top of the address range.

`tb_hams_workloads` drives the address streams of the twelve evaluated
workloads through the whole controller: four file-mapping
microbenchmarks, five SQLite queries and three Rodinia kernels.

- **Sizes.** Each footprint keeps the evaluation's ratio of data set to
  NVDIMM size (16, 11, 9, 5 and 7 GB against 8 GB), applied to a 64 KB
  test cache.
- **Mix and pattern.** Stores come with the workload's store share.
  Sequential workloads walk their pages; the others pick random words.
- **Checks.** One request is in flight at a time, so an independent
  direct-mapped tag model predicts every miss and every dirty eviction.
  The controller's counts must match it exactly.
- **Persist mode.** The microbenchmarks run again in persist mode.

Each workload's hit rate is printed. At these sizes it ranges from
about 30 % (random, twice the cache) to 92 % (KMN, which fits).

To run one testbench with Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_hams_top \
  rtl/hams_pkg.sv tb/tb_hams_pkg.sv rtl/*.sv \
  tb/nvdimm_model.sv tb/ull_flash_model.sv tb/tb_hams_top.sv -o sim
./obj_dir/sim
```

The unit testbenches need only `rtl/hams_pkg.sv`, `tb/tb_hams_pkg.sv`,
the block (plus `rtl/wait_queue.sv` for the address manager) and, for
the memory controller, `tb/nvdimm_model.sv`.

## Limits

- One SQ/CQ pair and one ULL-Flash. One 64-bit DDR4 channel, no refresh.
- Requests are handled one at a time by the manager. Parallelism comes
  from the outstanding NVMe commands, not from overlapping tag checks.
- The page copy into the PRP pool is done line by line through the
  memory controller: 2 × `PAGE_BYTES`/64 bursts per dirty eviction.
- Nothing models the electrical DDR4 PHY, the NVDIMM's own backup
  logic, or the ULL-Flash's firmware. Those are outside `hams_top`,
  and the testbench models only stand in for them.
