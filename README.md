# Pointer chasing and lazy coherence in the logic layer of a memory stack

A 3D-stacked memory has a logic die under its DRAM layers. That die can hold
computation which sees the full internal bandwidth and a short latency. Two
problems stand between such processing-in-memory (PIM) logic and ordinary
software:

* **Pointer chasing with virtual addresses.** Walking a linked list, hash
  chain or B-tree is a serial chain of dependent loads, and every pointer is
  a virtual address. An accelerator in memory must translate those addresses
  itself, and it should overlap many independent walks, because a single walk
  leaves the hardware idle while it waits for each load.
* **Coherence between the processor and the PIM cores.** A PIM kernel works
  on data that the processor may also hold in its caches. Fine-grained
  coherence messages for every PIM access would flood the narrow off-chip
  link that PIM exists to avoid.

This RTL implements the hardware of two mechanisms that answer these:

* **IMPICA**, a pointer-chasing accelerator. It has decoupled address and
  access engines, a region-based page table and a small cache that is aware
  of individual walks.
* **LazyPIM**, speculative PIM execution with coherence checked once per
  kernel. The check compares compressed address signatures, and the kernel
  commits or rolls back depending on the result.

Both sit side by side in the top module `pim_system`. The processor, its
caches and directory, the PIM core pipelines, the memory controller and the
DRAM are not part of the RTL: their signals are ports of the top.

---

## Part I — IMPICA

### Address–access decoupling

`impica_core` contains two engines that are joined by queues:

```
 host ──request queue──▶ ADDRESS ENGINE ──access queue──▶ ACCESS ENGINE ──▶ memory
          (16)             │  ▲   ▲                (16)      │  TLB (32)
                           │  │   └──response queue (16)─────┤  page walker
                 instr RAM ┘  data RAM                       └▶ IMPICA cache ◀─ fills
                 (16KB)       (16KB: one slot per operation)       (32KB, 2-way)
```

The **address engine** (`impica_address_engine`) runs the walk's code. It
handles everything except memory access: ALU operations, branches, and
reads and writes of an operation's parameters. A load does not wait.
Instead, the engine does the following:

1. It pushes `{virtual address, slot, destination register, root flag}` into
   the access queue.
2. It saves its registers R1–R7 and the PC (plus a load counter) into the
   operation's slot in the data RAM. This takes 8 cycles.
3. It goes back to idle.

In idle it prefers a waiting response over a new request. For a response it
reads the loaded word from the IMPICA cache, restores the 8 context words
and writes the word into the destination register. So while one walk waits
on memory, the engine computes for another walk.

The **access engine** (`impica_access_engine`) has no functional units. It
handles one access queue entry at a time:

1. It translates the address, through the TLB or a page walk.
2. It looks the line up in the IMPICA cache.
3. On a hit, it locks the line for this operation and pushes the entry to
   the response queue.
4. On a miss, it reserves a line and sends a line read to memory under an
   ID. Up to 8 reads (`NPEND`) may be outstanding, and their answers may come
   back in any order.

When a line arrives, the cache is filled and the matching entry moves to the
response queue. A page walk uses the same memory port under its own ID.

### Operation slots and the instruction set

The data RAM is split into 128 slots of 16 words. A host starts an operation
by filling a slot and pushing `{start PC, slot}` into the request queue.

| slot word | use |
|---|---|
| 0–6 | parameters P0–P6 (arguments in, results out), read by `LDP`, written by `STP` |
| 7 | done flag: the engine writes 1 when the operation executes `DONE` |
| 8–15 | saved context R1–R7 and `{load count, PC}` while a load is outstanding |

Instructions are 32 bits: `op[31:28] rd[27:25] rs1[24:22] rs2[21:19] imm[18:0]`.
The opcodes are:

* ALU: ADD, SUB, AND, OR, XOR, ADDI, SLLI, SRLI.
* Parameter access: LDP and STP.
* Memory: LD, a 64-bit load at `rs1 + imm`. It is the only memory
  instruction and it always switches context.
* Branches: BEQ, BNE, BLTU and BGEU, to `pc + imm`.
* DONE.

R0 reads as zero. The count of context switches is exactly the number of
`LD` instructions executed (`n_ctx_switch`).

The host loads code through a write port on the instruction RAM. It reads
and writes the data RAM through the second port of that RAM. It learns that
an operation finished by polling the done word, and `done_valid`/`done_slot`
also pulse.

### Region-based page table

Pointer-based structures normally lie in a few large, contiguous regions.
The walker (`impica_rpt_walker`) uses a three-level table shaped for that
case:

```
 VA[47:41]  ─▶ region table (4 entries, in registers) ─▶ base of the region's flat table
 VA[40:21]  ─▶ flat table, 2^20 entries of 8B          ─▶ 2MB page, or base of a 4KB table
 VA[20:12]  ─▶ 4KB table, 2^9 entries of 8B            ─▶ 4KB frame
 VA[11:0]      offset
```

A table entry has bit 0 = valid, bit 1 = "this entry maps a 2MB page", and
bits [39:12] = frame or next-table base. A walk therefore costs one memory
read for a 2MB page and two for a 4KB page. A VA outside all regions, or an
invalid entry, is a fault: the access is dropped and the sticky `fault`
output is set. The **TLB** (`impica_tlb`) is fully associative with 32
entries of either page size. It fills invalid entries first, then replaces
round-robin, and `tlb_flush` empties it. The OS writes the region table
through the `rt_*` port.

### The IMPICA cache

`impica_cache` is 32KB, 2-way, with 64B lines and 256 sets. Each tag carries
the fields D, V, RID (request ID = the slot), L (lock) and R (root). They
are used as follows:

* **Lock.** A line is locked from the moment an access hits or reserves it
  until the address engine has read the word. The read unlocks it only if
  the RID matches. This stops a line from being replaced between its fill
  and its consumer's read. When both ways of a set are locked, the access
  engine waits (`n_lock_stalls`).
* **Completion eviction.** When an operation executes `DONE`, every unlocked
  line carrying its RID is invalidated in the same cycle. A finished walk's
  nodes thus stop occupying space.
* **Root priority.** The first `ROOT_LOADS` (= 2) loads of an operation set
  R on their lines. The victim choice is an invalid line first, then an
  unlocked line without R, then an unlocked root line. The nodes near the
  root of a tree, which every walk visits, tend to stay.

### Timing (IMPICA)

* Queues accept and deliver one entry per cycle. The RAMs have a one-cycle
  read.
* A context save and a restore each take 8 cycles. A non-memory instruction
  takes 2 cycles (fetch, execute).
* A TLB hit gives the physical address in the next cycle. A walk adds one
  or two memory round trips.
* A cache hit goes to the response queue within a few cycles. A miss adds the
  memory latency.

---

## Part II — LazyPIM

### Speculation in the PIM core's L1

Each PIM core's L1 (`lazypim_l1`: 64KB, 4-way, 64B lines) carries two
extra fields per line:

* a **speculative bit**, set by any store while a kernel runs;
* an **8-bit word dirty mask**, one bit per 64-bit word.

Speculative data never leaves the cache before the kernel commits.
Write-backs carry the word mask, so memory merges only the words the PIM core
wrote. Processor writes to other words of the same line survive this way.

Three events end speculation:

* **Commit.** The cache visits all 1024 lines, one per cycle. For each
  speculative line it writes back the dirty words and clears both fields.
  This takes 1024 cycles plus one memory handshake per line written back.
* **Rollback.** Every speculative line is invalidated in a single cycle.
* **Speculative eviction.** A miss whose set holds only speculative lines
  cannot keep the kernel's updates, so it raises `spec_evict` and the kernel
  rolls back. Replacement avoids this where it can: it skips speculative
  lines while another way is free of them.

A kernel store to a line that was dirty *before* the kernel first writes the
old contents back, so a rollback can never destroy committed data.

Every read and write the core performs during the kernel is reported on
`ev_rd`/`ev_wr`/`ev_laddr`.

### Signatures

The PIMReadSet, PIMWriteSet and CPUWriteSet are `bloom_signature` instances.
A filter is a 256-byte register split into 4 partitions of 512 bits.
Inserting a line address sets one bit per partition. The bit is chosen by an
H3 hash: the XOR of fixed 9-bit masks, one per set address bit. The masks
come from an integer hash finaliser evaluated at elaboration.

A filter takes 607 addresses. After that the signature opens its next
filter, up to 16 (`NFILT`), so the false-positive rate of each filter stays
bounded. Sixteen filters for each of a core's three signatures is 12KB of
signature storage per PIM core. Past 16 × 607 addresses the last filter keeps absorbing them, and
`overflow` is set.

For 607 random addresses in one filter, the expected false-positive rate is
(1 − e^(−607/512))^4 ≈ 23%. The testbench measures about 23%. There are
never false negatives.

### Resolving a kernel

`lazypim_pim_unit` sits beside each PIM core and holds the kernel's state:

```
IDLE ──dispatch (checkpoint PC)──▶ RUN ──kernel end──▶ WAIT ──commit──▶ COMMIT ──L1 done──▶ IDLE
                                   ▲ │                  │
                                   │ └─spec. eviction───┤
                                   └──────rollback──────┘   (restart at checkpoint PC)
```

`lazypim_conflict_detect` is the processor-side logic. It keeps one
CPUWriteSet per PIM core, fed with processor writes to the PIM data region
while that core's kernel is live. It serves finished kernels one at a time,
in round-robin order:

1. **Compare.** It reads the PIMReadSet one filter per cycle and intersects
   it with every used CPUWriteSet filter. Two filters overlap only if every
   partition shares a set bit: any address in both filters would have set one
   common bit per partition. With one filter on each side, the compare
   takes one cycle.
2. **No overlap → commit.** It sends the processor cache the command
   *invalidate lines in the PIMWriteSet*. The cache scans its lines, tests
   each one through `cpu_scan_laddr`/`cpu_scan_hit`, and answers
   `cpu_cmd_done`. Then it tells the core to commit and waits for the L1
   write-back to finish. During all of this `dir_lock` is high. Finally it
   erases the CPUWriteSet.
3. **Overlap → rollback.** It sends the command *flush the dirty lines in the
   PIMReadSet* with `dir_lock` high. When the flush completes, it tells the
   core to roll back: drop the speculative lines, erase the signatures and
   restart at the checkpoint. It also erases the CPUWriteSet.
4. **Lock mode.** The third rollback of the same kernel sets lock mode. The
   core keeps its PIMReadSet through that rollback. From then until the
   kernel commits, processor writes to the PIM region that hit the kept
   PIMReadSet are refused (`cpu_wr_block`). The re-executed kernel therefore
   cannot conflict again.

While a scan runs, all PIM-region processor writes are held off, because
the query port belongs to the scan.

---

## The top: `pim_system`

The top has three port groups:

* `i_*` — IMPICA: instruction and data RAM access, requests, the
  region-table write port, the memory port (line reads with 4-bit IDs), done
  and fault, and counters.
* `p_*` — arrays over the `M` PIM cores:
  * kernel start, start PC and end;
  * restart and restart PC, done and busy;
  * the core's load/store port into its L1;
  * the L1's memory port (line reads, masked line writes);
  * per-core counters of commits, rollbacks and eviction rollbacks.
* `cpu_*`, `dir_lock` — the processor side:
  * writes to the PIM region, and whether each was refused;
  * the scan command, its done signal and the membership query;
  * the directory lock;
  * counters of checks, conflicts, lock-mode entries and signature bytes
    moved.

The defaults are `M = 16` PIM cores and `NFILT = 16` filters per signature.
The IMPICA sizes inside are the defaults listed above. There is one clock
and one active-low asynchronous reset.

## Where this RTL departs from, or goes beyond, the paper's description

* **IMPICA's instruction set, slot layout and host protocol are this
  design's.** The description gives only the roles of the two engines and
  the two RAMs. Code is written into the instruction RAM through a port. The
  accelerator does not fetch it from DRAM itself.
* **The region table is held in registers.** It is not cached in the IMPICA
  cache.
* **Page-table entry format, TLB organisation, cache victim order and the
  number of loads that count as "root" (2) are choices.**
* **Signature hashing (4 partitions, H3) is a choice.** The 256B filter,
  the 607-address limit and the 12KB per core (16 filters per signature)
  are as described.
* **The lock after three rollbacks is realised by refusing processor writes
  that hit the kept PIMReadSet.** Individual directory entries are not
  locked.
* **Processor writes to the PIM region are all held off while the
  processor cache scans for a flush or an invalidation.** Only lines hit by
  a locked PIMReadSet are refused at other times. The description lets
  the processor stall only when it touches data the PIM kernel uses.
* **The PIM L1 answers a hit one cycle after taking it.** The evaluated
  configuration has a 2-cycle lookup; the extra cycle is not modelled.
* **The PIM L1 is a blocking cache with one miss at a time.** Its pre-kernel
  write-back of dirty lines is this design's way to keep rollback safe.
* **Not built:** the processor, its caches, Dirty-Block Index and directory;
  the PIM core pipelines, including register checkpointing; the
  per-page PIM-data flag in the page table and TLB, which the processor uses
  to pick the writes it sends to the CPUWriteSet; the vault memory
  controller; the DRAM. The 500 MHz and 2 GHz clock rates are properties of
  an implementation, not of this RTL.

## Simulating

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/impica_pkg.sv rtl/lazypim_pkg.sv \
          tb/tb_pim_system.sv --top-module tb_pim_system -Mdir obj -o sim
obj/sim
```

Replace `tb_pim_system` with any other testbench name.

| testbench | what it exercises |
|---|---|
| `tb_impica_queue`, `tb_impica_ram`, `tb_impica_tlb` | FIFO order and back-pressure; both RAM ports; TLB hits, 2MB pages, replacement, flush |
| `tb_impica_rpt_walker` | 4KB and 2MB walks, the bit fields, faults |
| `tb_impica_cache` | lock, RID-checked unlock, completion eviction, root priority |
| `tb_impica_address_engine` | program execution, context save/restore per load, done flag |
| `tb_impica_access_engine` | translation, out-of-order line fills, 8 outstanding misses, faults |
| `tb_impica_core` | 8 concurrent linked-list searches through scattered pages |
| `tb_impica_hashtable` | hash-table lookup workload: 256 buckets, 384 keys, 4 rounds of 16 concurrent lookups, present and absent keys |
| `tb_bloom_signature` | no false negatives, ≈23% false positives at 607 addresses, filter spill, clear |
| `tb_lazypim_l1` | loads/stores against a reference, kernel isolation, rollback, commit timing, speculative eviction |
| `tb_lazypim_pim_unit` | the kernel state machine, lock-mode read-set retention |
| `tb_lazypim_conflict_detect` | commit and rollback sequences, write hold-off, lock mode after three rollbacks |
| `tb_pim_system` | whole chip with 4 PIM cores; every mechanism above happens and is counted |
| `tb_pim_system_full` | the same at the default sizes (16 PIM cores, 16 filters); about 2 minutes to build |

The end-to-end tests run the following concurrently:

* IMPICA searches, including nodes in a 2MB page;
* a committing kernel;
* a kernel that conflicts three times and then commits in lock mode;
* a kernel that overflows an L1 set with speculative lines;
* a kernel whose 700-line read set spills into a second filter.
