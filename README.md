# MFOE: a page walker that services minor page faults itself

When a program touches a page of freshly `malloc`ed or anonymously `mmap`ed
memory for the first time, the page table has no frame for it yet. On an
ordinary x86-64 system this is a *minor page fault*: the core traps into the
kernel, which finds a free frame, zeroes it, installs the PTE, updates its
bookkeeping and returns. Each of these faults costs thousands of cycles, and
memory-hungry programs take hundreds of thousands of them per second.

The design here moves almost all of that work off the critical path. The
kernel allocates and zeroes frames *ahead of time* and leaves them in a small
per-core ring buffer in memory, the **pre-allocation table**. It also marks,
at `mmap()` time, every empty last-level PTE of the new region as
**MFOEable** ("may be serviced by the offload engine") and writes the
owning process's thread-group id (TGID) into the PTE's unused frame field.
When the hardware page walker then reaches such an empty PTE, it hands it to
the **Minor Fault Offload Engine (MFOE)** next to it. The MFOE takes the next
frame from the core's table, writes it into the PTE, notes in the table which
virtual address and process consumed it, fills the TLB and lets the access
complete, all in a few dozen cycles and without a trap. A periodic kernel
thread later reads the notes, does the bookkeeping (reverse maps, counters)
and refills the used entries. If the table has run dry, or the page is not
MFOEable, the MFOE gives up and the normal fault handler runs, so the
hardware never has to be right about anything the kernel has not prepared.

This repository holds synthesizable SystemVerilog for the hardware side:
the TLB, the page walker, the MFOE, the per-core CR9 register and a
lock-aware memory arbiter that joins eight cores to one memory port. It
also has self-checking testbenches and a behavioural model of memory and of
the kernel's part of the protocol.

## Block structure

```
          core 0 .. core N-1 (mfoe_core, N_CORES = 8)
 request ─► TLB ─miss─► page_walker ─non-present PTE─► mfoe_engine
             ▲              │                              │
             └─── fill ─────┴──────────── fill ────────────┘
                            │  (2:1 mem_arbiter)           │
                            └──────────────┬───────────────┘
                                           ▼
                          mem_arbiter (N_CORES:1, lock aware)
                                           ▼
                       main memory: page tables, pre-allocation tables
```

| file | what it is |
|---|---|
| `rtl/mfoe_pkg.sv` | widths, PTE bit positions, CR9 and table layouts, memory request struct, fault codes |
| `rtl/tlb.sv` | fully associative TLB, combinational lookup, write hits need a dirty entry |
| `rtl/page_walker.sv` | four-level x86-64 walk from CR3, sets A/D, hands empty leaves to the MFOE |
| `rtl/mfoe_engine.sv` | the offload engine's state machine |
| `rtl/mem_arbiter.sv` | round-robin arbiter that keeps the port for a locked read-modify-write |
| `rtl/mfoe_core.sv` | one core: CR9, TLB, walker, MFOE, retry after a fill |
| `rtl/mfoe_system.sv` | top: `N_CORES` cores on one memory port |

## Life of an access

`mfoe_core` accepts a request `(va, write)` and looks it up in the TLB. A
hit answers two cycles after acceptance. On a miss, `page_walker` reads
the four levels of the page table. The result is one of three cases:

* **Present leaf.** The walker sets the accessed bit, and the dirty bit on a
  write, if they are not yet set. It then fills the TLB.
* **Upper level missing, or a write to a read-only page.** The walker
  reports an ordinary fault (`FLT_NONLEAF`, `FLT_PROT`).
* **Empty leaf.** The walker passes the PTE and its physical address to
  `mfoe_engine`, so the engine never walks again.

After any fill the core retries the lookup, which then hits. This stands for
the core re-executing the faulting instruction. Anything the walker or the
MFOE gives up on comes back as `resp_fault` with a code. That is the page
fault exception the kernel would take.

The TLB records whether each translation is writable and dirty. A write only
hits an entry that is already dirty. So the first write to a page that the
MFOE mapped for a read goes back through the walker, which sets D in the
PTE. This is ordinary x86 behaviour, kept so that the kernel's view of dirty
pages stays right.

## The pre-allocation table

Each core owns one table, in physically contiguous memory. CR9 holds its
frame number, its entry count and an enable bit. Every slot is 16 bytes.
Slot 0 is the header; slots 1..N are entries.

```
header  qword 0 = { tail[63:32], head[31:0] }      indices run 1..N, N wraps to 1
        qword 1 = { locks[63:32], entries[31:0] }
entry   qword 0 = { tgid[63:36], pfn[35:2], used[1], valid[0] }
        qword 1 = faulting virtual address
CR9             = { 13'b0, enable[50], entries[49:34], table_pfn[33:0] }
```

The table is a single-producer, single-consumer ring:

* **The kernel produces.** It reads only the head index. At the head entry
  it looks at the `used` bit. If it is set, it takes the recorded VA, TGID
  and PFN for its bookkeeping. Then it installs a fresh frame with `valid=1,
  used=0` and advances the head.
* **The MFOE consumes.** It reads only the tail index. If the tail entry is
  `valid`, it takes that frame, marks the entry `used=1, valid=0`, stores the
  VA and TGID, and advances the tail.
* **The table is empty** exactly when the tail entry is not valid. The MFOE
  then reports `FLT_EMPTY` (an "MFOE miss") and the kernel handles the fault
  the slow way.

Each side writes only its own index. The MFOE updates the tail with a
byte-strobed write of the upper half of header qword 0, so it never
disturbs the head. No lock is needed between the two sides. The `locks`
word belongs to the kernel: it serialises its own refill thread against
process-exit cleanup, and the hardware never touches it.

Ordering matters because the refill thread runs whenever it likes. The
MFOE writes an entry's VA word *before* the word that sets `used`. So the
kernel can never see a used entry whose VA is not there yet.

With the default of 256 entries, the entries fill 4 KiB. With the header
they fill one page plus 16 bytes, so a table spans two frames.

## The MFOE sequence

`mfoe_engine` works through the following steps. Each step is one 64-bit
access on the memory port, except the first.

1. **Check.** The engine gives up at once, with no memory access, if:
   * the PTE is not MFOEable (`FLT_NOT_MFOE`);
   * CR9 has the engine disabled (`FLT_DISABLED`);
   * the access is a write and the empty PTE's RW bit is clear (`FLT_PROT`).
2. **Read the header** and take the tail index.
3. **Read entry word 0 at the tail.** If it is not valid, the table is
   empty: give up with `FLT_EMPTY`.
4. **Locked read of the PTE.**
5. **Write the PTE back with the lock bit set.** If step 4 found the lock
   already set, see the next section.
6. **Write the faulting VA** into entry word 1.
7. **Write entry word 0** with the TGID (copied from the empty PTE),
   `used=1` and `valid=0`.
8. **Write the new tail** (tail+1, or 1 after N) into the header's upper
   half.
9. **Write the final PTE.** It carries the new PFN, with present and
   accessed set, dirty set for a write, and the lock cleared.

The engine then reports the frame, and the core fills the TLB. A hit costs 3
reads and 5 writes. With the 2-cycle memory used in the testbenches (the L1
latency of the evaluated system), the engine takes 27 cycles from hand-off
to result. A whole fault from the core's point of view takes 45 cycles: TLB
lookup, a 4-read walk, the engine, the fill and the retried lookup. A miss
on an empty table takes 8 cycles and a fault that fails the first check
takes 2. The published evaluation measured 36 cycles mean for an MFOE hit
(78 cycles mean plus one standard deviation, 125 cycles 95th percentile) and
14 cycles for a miss. The testbenches check the engine against 78 and 14.

The evaluation also describes a hit as taking "less than 5 memory
accesses". That cannot hold together with its own step list plus the locked
read and write of the PTE. This design follows the step list and the lock
protocol and takes 8 accesses.

## Two cores, one page: the PTE lock

Threads of one process share a page table. So two cores can fault on the
same page at the same moment. The kernel's own fault handler can also race
with an MFOE, for example when the background thread marks a PTE MFOEable
just after one core saw it unmarked. Both would otherwise install a
different frame in the same PTE.

The protocol uses one spare (AVL) bit of the empty PTE, bit 9, as a lock.
Anyone who wants to fill the PTE, hardware or kernel, must first set that
bit atomically. The MFOE does it with a *locked read* followed by a write:

* `mem_arbiter` sees a read with `lock` set. After that read, it grants the
  port to no one else until the same requester's next access has completed.
  The two-level arbitration (walker/MFOE inside a core, cores at the top)
  passes the lock through. So from every other core's point of view, the
  read and the write that sets the lock bit are one atomic step.
* **If the lock bit was clear**, the engine now owns the PTE. It continues
  with the table updates and clears the lock in the final PTE write.
* **If the lock bit was already set**, someone else is filling this page.
  The engine first writes the PTE back unchanged. That write only ends the
  locked pair, so the port is released. Then the engine polls the PTE with
  plain reads:
  * when the lock clears and the PTE is present, the engine takes *that*
    translation, fills the TLB and consumes nothing from its own table;
  * when the lock clears and the PTE is still empty, the engine goes back
    and tries to take the lock itself.

Every core that loses the race still gets the winner's frame, and a page is
never given two frames. The end-to-end test shows this: eight cores fault on
the same 16 pages at once and record 112 lock waits (7 losers × 16 pages).
Each page is reported exactly once by the refill.

Holding the whole memory port during the locked pair is simpler than
locking a single address. It stands for the bus or cache-line lock a real
x86 core would use. The pair is two accesses long, so the cost is small.

## What the kernel must provide

The hardware relies on software for the following, which the testbenches
model in `tb/mem_model.sv` and `tb/tb_mfoe_system.sv`:

* **Page-table paths.** At `mmap()` time, build the page-table path down
  to the last level.
* **Empty PTEs.** Write each empty PTE with MFOEable (bit 2) set, the RW bit
  the mapping should have, and the TGID in the frame field.
* **Tables and CR9.** Allocate and fill one pre-allocation table per core,
  and write each core's CR9. Writing CR9 with the enable bit clear turns the
  engine off.
* **Refill.** Run the refill/bookkeeping pass periodically; the evaluated
  system uses 2 ms.
* **Fault handler.** Handle `FLT_EMPTY`, `FLT_NOT_MFOE` and `FLT_DISABLED`
  like an ordinary minor fault, taking the PTE lock bit first.

## Parameters

| parameter | default | origin |
|---|---|---|
| `mfoe_system.N_CORES` | 8 | core count of the evaluated system |
| `TLB_ENTRIES` / `tlb.ENTRIES` | 64 | own choice (not given) |
| `mfoe_pkg::PFN_W` | 34 | CR9 carries a 34-bit frame number |
| `mfoe_pkg::VA_W` | 48 | four-level paging |
| `mfoe_pkg::TGID_W` | 28 | own choice, fits next to PFN, used and valid in one word |
| table entries (software, in CR9) | 256 in the tests | the evaluated size; CR9's 16-bit field allows up to 65535 |

## Where this design departs from, or adds to, the description it follows

* **Own choices of position and size.** Bit positions of CR9, the header and
  the entry words, the lock bit's position (AVL bit 9) and the TGID width
  were not given. The TLB size and organisation were not given either.
* **Permissions.** Permission checks are done at the leaf only, against the
  RW bit. User/supervisor and no-execute bits are not modelled. The MFOE
  refuses a write to an empty PTE whose RW bit is clear, so the kernel is
  expected to copy the region's write permission into the empty PTE.
* **Page sizes.** Only 4 KiB pages. Huge-page offload, described as a
  possible extension, is not built. Neither is nested paging for virtual
  machines, which is described as future work.
* **Memory system.** One 64-bit memory port stands in for the cache
  hierarchy. Cache latencies and coherence are not modelled; locking is
  done by the arbiter, as described above.
* **Access count.** A hit takes 8 memory accesses, not "fewer than 5" (see
  above).
* **Entry write order.** The VA word of an entry is written before the
  status word, for the reason given in the table section.
* **Miss signal.** A miss is reported as a fault code on the response. The
  original calls it an interrupt to the kernel.
* **Workload timing.** The workload testbenches scale time down by 16. The
  kernel's fault handler takes no simulated time in them. So they measure
  the hardware's share of a fault and the hit rate, not whole-program
  speed-ups. The full-application speed-ups were estimated from traces and
  are not reproduced.

## Verification

Every block has a self-checking testbench in `tb/`. Each ends with a line
`TB_RESULT checks=<n> failures=<m>`, and each has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_tlb` | 8-entry TLB against a reference model: fills past capacity, overwrite, dirty rule, random traffic, flush |
| `tb_page_walker` | A/D updates and write counts, protection fault, upper-level fault, hand-off of the empty PTE and its address, 60 random walks |
| `tb_mem_arbiter` | 3 requesters: data routing, fairness, and a shared counter incremented 120 times by locked read-modify-writes with a monitor that no one slips in between |
| `tb_mfoe_engine` | 4-entry table: every refusal, 4 hits with the PTE, entry, VA and header checked word by word, hit latency exactly 27 and ≤ 78 cycles, tail wrap, miss ≤ 14 cycles, refill, and a PTE locked by the kernel for 60 cycles |
| `tb_mfoe_core` | one core with a 4-entry table: MFOE hit then TLB hit in 2 cycles, dirty-bit walk, refusals, table exhaustion and refill, disable, flush |
| `tb_mfoe_latency` | workload: MFOE hit and miss latency on two full-size systems, with 2-cycle and with 8-cycle memory, one thread and eight threads |
| `tb_mfoe_microbench` | workload: fault-rate, table-width, refill-interval and thread-count sweeps, described below |
| `tb_mfoe_system` | the top at its default size (8 cores, 64-entry TLBs, 256-entry tables): shared-page races, 512 private faults, one core draining its table to a miss, every fault kind; every PA checked against memory, no frame given twice, refill reports exactly the MFOE-mapped pages; 16 mechanisms counted, each must occur |

The workload testbench `tb_mfoe_microbench` runs the fault-throughput
micro-benchmark on the top at its default size. Up to eight threads, one per
core, each fault on a new page after every delay and make a few TLB-hitting
accesses in between. Thread start times and delays are randomised so the
threads drift against each other. Time is scaled down by 16, which keeps the
number of faults per refill interval and so the hit rate. The table size is
reprogrammed through CR9 between points.

In the first three sweeps, eight threads run and the kernel refills every
table instantly at the end of each interval. Each interval is checked
separately: every core's MFOE must serve exactly min(faults, entries) of its
faults, give or take one fault that straddles a refill. Measured with 2-cycle
memory:

| delay between faults (full-scale cycles) | entries | refill interval | faults per core per interval | served by the MFOE |
|---|---|---|---|---|
| 6000 | 256 | 2 ms | 815 | 0.31 |
| 12000 | 256 | 2 ms | 455 | 0.56 |
| 24000 | 256 | 2 ms | 239 | 1.00 |
| 36000 | 256 | 2 ms | 162 | 1.00 |
| 6000 | 128 | 2 ms | 815 | 0.16 |
| 6000 | 512 | 2 ms | 813 | 0.63 |
| 6000 | 1024 | 2 ms | 810 | 1.00 |
| 24000 | 256 | 4 ms | 479 | 0.53 |
| 24000 | 256 | 8 ms | 958 | 0.27 |

The fourth sweep varies the thread count at a 24000-cycle delay. Here the
refill runs at the speed measured for the kernel's software: 580,169 pages/s,
or 5170 cycles per page at 3 GHz. It sleeps 2 ms, then works through the
tables one core after another. Each core must have served exactly the pages
it was given.

| threads | 1 | 2 | 4 | 8 |
|---|---|---|---|---|
| served by the MFOE | 1.00 | 1.00 | 0.94 | 0.87 |

The published curves read about 0.36, 0.55, 0.88 and 1.0 for eight threads
at 6000, 12000, 24000 and 30000 cycles. At 24000 cycles, fewer threads are
fully served. Eight threads fall short because one refill thread cannot keep
up with them, which this model reproduces. Across the whole run the hit
latency from the walker's hand-off averages 38 cycles. Its maximum is 159
cycles, reached under contention for the shared memory port. A miss averages
11 cycles. The run takes under a minute and a half.

The workload testbench `tb_mfoe_latency` measures the same latencies as the
published micro-benchmark. The clock runs from the walker handing the empty PTE
to the MFOE until the TLB is filled (hit) or the MFOE gives up (miss). It
runs two copies of the full-size system (each wrapped with its memory and
benchmark threads in `tb/mfoe_lat_rig.sv`). One copy has 2-cycle memory and
the other 8-cycle memory: the L1 and L2 latencies of the evaluated system.
With one thread the latencies are exact: a hit takes 8·(LAT+1)+3 cycles and
a miss 2·(LAT+1)+3. That is eight or two dependent memory accesses plus the
engine's own cycles.

| memory | case | hit mean / sd / p95 / max | miss mean / sd / p95 / max |
|---|---|---|---|
| 2 cycles | one thread | 27 / 0 / 27 / 27 | 9 / 0 / 9 / 9 |
| 2 cycles | eight threads | 44 / 21 / 87 / 141 | 12 / 4.5 / 21 / 42 |
| 8 cycles | one thread | 75 / 0 / 75 / 75 | 21 / 0 / 21 / 21 |
| 8 cycles | eight threads | 272 / 88 / 414 / 513 | 68 / 27 / 108 / 153 |

The published figures are 36 / 42 / 125 cycles (mean, standard deviation,
95th percentile) for a hit and a 14-cycle mean for a miss. They were
measured behind per-core caches where each access hits L1, L2 or DRAM. They
fall between the two single-thread rows, which the testbench checks. The
eight-thread rows show the cost of this design's single shared memory port.
With a cache per core in front of it, contention would mostly vanish.

`tb/mem_model.sv` is a behavioural memory with a fixed latency (2 cycles by
default). It also carries the kernel-side helpers: building page tables,
writing MFOEable PTEs, initialising and refilling tables.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps \
    -y rtl -y tb +libext+.sv -Irtl -Itb rtl/mfoe_pkg.sv tb/tb_mfoe_system.sv \
    --top-module tb_mfoe_system -o sim
./obj_dir/sim
```

The full-size system test runs in well under a second of simulation time.
The top synthesises (generic cells) to about 15 k cells and 43 k flip-flop
bits. Most of that is the eight 64-entry TLBs.
