# A shared memory unit for two hardware threads

Take a working single-threaded SPARC V8 processor and add a second, identical
execution pipeline without changing either pipeline's insides. The two
pipelines share one memory unit: one instruction cache, one data cache and
one MMU. Because both threads work through the same data cache, a store by
one thread can be read by the other on the next cycle. A thread can hand a
small task to the other thread through a word in memory and get the answer
back within a few tens of cycles. This is far cheaper than an interrupt or a
message between cores, and it makes fine-grained "side-kick" parallelism
worthwhile: the main thread posts work, and a spinning helper thread picks it
up. When there is nothing to hand over, the second thread is switched off.

This RTL is the shared part of such a processor:
- the per-thread instruction buffers;
- the two cache multiplexors;
- the instruction and data caches;
- the SPARC reference MMU with its TLB;
- the per-thread control units;
- the control/debug aggregator that gives them one external port.

The two execution pipelines are not included. They connect to the top
module through plain fetch, load/store and control ports, and the end-to-end
testbench stands in for them.

```
             external control / debug port
                        |
              control/debug aggregator
                 |                 |
             control 0         control 1          (mode, start/stop, halt/step)
                 |                 |
   pipeline 0 (outside)       pipeline 1 (outside)
     |fetch     |ld/st         |fetch     |ld/st
  ibuf 0        |           ibuf 1        |
     |          |              |          |
     +---- icache mux ---------+          |
     |          +---------- dcache mux ---+
   icache                 dcache
     |                      |
     +-------- MMU ---------+      (TLB, table walk)
                 |
           system bus (physical)
```

## Sizes

| what | default | parameter |
|---|---|---|
| threads | 2 | `dt_pkg::NTHREADS` |
| instruction buffer | 128 instructions per thread | `IBUF_ENTRIES` |
| instruction cache | 32 KB, 4-way, 64-byte lines | `ICACHE_BYTES`, `CACHE_WAYS` |
| data cache | 32 KB, 4-way, 64-byte lines, write-through, write-allocate | `DCACHE_BYTES`, `CACHE_WAYS` |
| data cache write queue | 4 double words | `WQ_DEPTH` |
| TLB | 256 entries, 8-way | `TLB_ENTRIES`, `TLB_WAYS` |
| virtual / physical address | 32 / 36 bits | `dt_pkg` |
| data path | 64 bits; a line moves as 8 beats | `dt_pkg` |

Most of these numbers are the reference design's. The write queue depth and
the widths of the internal paths are this design's choices.

## How the two threads share the caches

### Channels

Every link is a request channel with `valid`/`ready` and a response channel
with no back-pressure: whoever sends a request must accept its response.
Requests carry the requesting thread's id (`tid`), and the id comes back with
the response. The multiplexors use it to raise the response valid of the
right thread only. The response data wires are shared by both threads.
The types are in `dt_pkg.sv`:

| type | carries |
|---|---|
| `ic_req_t` / `ic_rsp_t` | fetch: address and supervisor bit in; instruction pair (64 bits) and error out |
| `dc_req_t` / `dc_rsp_t` | load/store: address, supervisor bit, write flag, byte enables, write data, `lock`, `nc` in; load data and error out |
| `mem_req_t` / `mem_rsp_t` | cache to MMU: virtual address, supervisor bit, line read or single write; beats with `last` back |
| `bus_req_t` / `bus_rsp_t` | MMU to system bus: physical address |

Byte enables and data are big-endian, as on SPARC: enable bit 7 and data
bits [63:56] are the byte at the lowest address.

### Fairness and locking (`icache_mux`, `dcache_mux`)

Each mux grants one request per cycle. When both threads ask, the thread that
was not granted last time wins. A thread therefore waits at most one access
for the other.

The data cache mux also implements locking for atomic sequences such as
SPARC `ldstub` and `swap`:
- A request with `lock = 1` makes the mux serve only that thread from then on.
- The lock holds until that thread sends a request with `lock = 0`.
- The other thread stalls in the meantime.

This is the intended cost of atomics in this design. The end-to-end test
counts the stall cycles while two threads increment a counter under the lock.

### Instruction buffer

In front of the mux, each thread has a 128-instruction buffer of recently
fetched instruction pairs. It has 64 direct-mapped slots of one 8-byte pair,
with virtual tags.
- A hit answers one cycle after the request, without touching the
  instruction cache.
- A miss goes to the cache, and the returned pair is stored.

The buffer is aimed at spin loops: a thread waiting for work keeps fetching
the same few pairs, and without the buffer it would take instruction cache
cycles from the thread doing the work. Each fetch returns two instructions,
so one thread uses at most about half of the cache's fetch bandwidth. The
buffer gives back most of the rest. `ibuf_flush` invalidates the buffer. The
pipeline must raise it whenever the instruction cache would also need
flushing, for example after code is written or the context changes.

### Blocking caches and their effect on the other thread

Both caches are virtually indexed and virtually tagged:
- A hit delivers data on the cycle after the request, and a new request can
  be accepted every cycle.
- Replacement is not-most-recently-used. Each set remembers the way hit or
  filled last. The victim is the first invalid way, otherwise the way after
  the remembered one.
- A miss blocks the cache until the line is filled. The fill is eight 64-bit
  beats from the MMU. The answer goes out the cycle after the last beat.

While a cache is blocked, the other thread's requests to it wait. This is
the main way the two threads slow each other down. Large, 4-way caches are
there to make it rare. The memory unit cannot overlap one thread's miss with
the other thread's hits: the price of leaving the pipelines untouched and
the caches simple.

### Write-through data cache and one-cycle visibility

The data cache is write-through with write-allocate.
- A store that hits updates the line in the cycle it is looked up, and the
  double word goes into a 4-entry write queue. The queue drains to memory in
  the background, so a store hit costs one cycle like a load hit.
- A store that misses first fills the line, then is merged into it, and is
  queued the same way.
- A load or store that misses waits until the queue is empty. Writes
  therefore reach memory in program order, before any later line fill.
- When the queue is full, a store hit waits for a free entry.

The data memories are read one cycle after the request arrives. A store
accepted in one cycle and a load to the same double word accepted in the
next therefore meet in the same cycle: the store writes the array, and the
load reads it. A bypass register catches this case. For the bytes the store
writes, the load gets the store's data instead of the old array contents.
This gives the property the design is built around: a load issued one cycle
after another thread's store sees the new value.

Accesses with `nc = 1` (non-cacheable, for I/O) skip the arrays and go to the
MMU as single reads or writes. A slow device therefore blocks the data cache
for both threads for as long as it takes.

### MMU

The MMU serves one cache request at a time. When both caches are waiting,
it alternates between them.

With translation enabled (control register bit 0), it looks up the TLB: 256
entries, 8-way, with an 8-bit context number. On a miss it performs the
SPARC V8 reference-MMU table walk over the system bus:

| step | entry address |
|---|---|
| context table | `CTP*64 + ctx*4` |
| level 1 | `PTP*64 + va[31:24]*4` |
| level 2 | `PTP*64 + va[23:18]*4` |
| level 3 | `PTP*64 + va[17:12]*4` |

- An entry with ET=1 is a page table descriptor (PTD): the walk goes down a
  level.
- An entry with ET=2 is a page table entry (PTE). The walk sets its
  referenced bit R, and for a store its modified bit M. If that changed the
  PTE, it writes the PTE back to memory. The PTE is then written into the
  TLB with its level, so 16 MB regions, 256 KB segments and 4 KB pages all
  translate, and the lookup is repeated.
- ET=0, ET=3, or a PTD at level 3 is a fault. The fault status and fault
  address registers are written, and the cache gets one response with `err`
  set.

Every access is checked against the page's ACC bits, as the SPARC reference
MMU defines them. The check uses the supervisor bit that each fetch and
load/store request carries, and the access kind: an instruction cache
request is an execute, a data cache request a read or a write.
- A user access to a supervisor-only page faults with FT = 3 (privilege
  violation).
- Any other refused access faults with FT = 2 (protection error).
- The fault status register also records the access type and the level.
- The TLB keeps each page's M bit. A store through a page whose M bit is
  still clear goes through the walk, so that M is set in memory before the
  page is written.

The caches are virtually tagged and do not repeat the check on a hit. The
check happens when a line is filled, on every non-cacheable access and on
every write-through store. A store to a read-only page therefore changes the
cached line, but the MMU refuses it on the way to memory, and the data cache
reports that with `dcache_wr_err`. Software must not rely on the cached copy
after such an error.

A large page is entered into the TLB set of the address that missed.
Another address of the same page, if it falls in a different set, walks
again. The registers are reached through a simple port (`mmu_reg_*`):

| address | register |
|---|---|
| 0 | control |
| 1 | context table pointer, holding physical address bits [35:6] in bits [31:2] |
| 2 | context |
| 3 | fault status |
| 4 | fault address |

### Thread control and the debug port

Each thread has a control unit with four modes: idle, run, debug and error.
It accepts these commands:
- *reset*: hold the pipeline in reset.
- *start*: activate.
- *stop*: deactivate, to save power.
- *halt*: enter debug mode.
- *continue*: leave debug mode.
- *step*: run until one instruction retires, then return to debug mode.

The pipeline reports errors, breakpoints and retired instructions.
- An error puts the thread in error mode.
- A breakpoint puts it in debug mode.
- Entering a mode by itself sends an event (halted, error or stopped) to the
  debugger.

`thread_run` tells the pipeline whether it may issue. Thread 0 comes out of
reset running. Thread 1 waits for a start command, which matches the usual
use: one main thread, plus a helper woken up when there is work for it.

The aggregator joins the two control units to one external port. A command
carries a thread id, or an "all" flag that sends it to both threads. Each
thread has a one-entry holding register for events, and the two are sent
out round robin. An event that arrives while the previous one is still held
sets a sticky `evt_lost` flag.

## Timing summary

| operation | cycles |
|---|---|
| instruction buffer hit | 1 |
| cache hit (load, store, fetch) | 1; a new request every cycle |
| store then load, other thread, next cycle | load sees the store |
| line fill from the system bus | bus latency + 8 beats. The testbench memory takes 30 cycles from request to last beat, the reference system's miss penalty |
| table walk | 2 to 4 bus reads, then the access |
| side-kick round trip in the end-to-end test | 18 to 30 cycles once the channel is cached (the test's pipeline model does one memory access at a time) |

## Where this departs from the reference design

- **Execution pipelines:** not included (fetch with branch prediction,
  decode, integer and floating-point units, load/store, precise traps). The
  top module ends at their ports.
- **Interrupts:** the interrupt inputs belong to the pipelines and are not
  ports of the top.
- **MMU:** its registers form a plain port rather than being reached by
  alternate-space loads and stores. The system bus has no error signal, so
  bus-error fault types are never reported. Permission checks happen only
  on the way to memory, as described above, not on cache hits.
- **Synonyms and coherence:** the synonym detection and the coherence
  invalidation of the reference memory unit are not included. Their
  behaviour is not described well enough to build.
- **Cache sizes:** the caches have fixed 64-byte lines. Size and
  associativity are parameters (powers of two; the reference design allows
  4 KB to 32 KB and 1 to 8 ways).
- **Own choices:** the instruction buffer's organisation (direct-mapped
  pairs), the write queue, the store-to-load bypass, the channel protocols,
  the command and event encodings and the round-robin policies.
- **Outside the chip:** the UARTs, other peripherals, the DRAM controller
  and the DRAM of the evaluation system are not included. The testbenches
  use behavioural memories in their place.

## Evaluation kernels

`tb_workloads.sv` runs the memory side of eight evaluation kernels on the
default-size core. The two pipelines are modelled as
in the end-to-end test: one access at a time, with 64-bit integers in place
of doubles. Each kernel runs first on thread 0 alone, then split across
both threads: thread 0 posts a command and thread 1 picks it up. Every run
starts from cold cache lines, and the results are checked. The numbers
below come from one run, with a 30-cycle line fill.

| kernel | one thread (cycles) | two threads (cycles) | speed-up | data cache miss rate |
|---|---|---|---|---|
| dot product, 2 × 1024 elements | 17186 | 13176 | 1.30 | 12.4% |
| daxpy, 1024 elements | 19742 | 17411 | 1.13 | 8.3% |
| memory copy, 32 KB | 69137 | 69178 | 0.99 | 12.5% |
| counter under the lock, 1024 increments | 8238 | 8234 | 1.00 | about 0% |
| merge sort, 1024 numbers | 99717 | 99670 | 1.00 | 1.0% |
| matrix multiply, 32 × 32 | 214794 | 115945 | 1.85 | 0.6% |
| FFT-shaped transform, 4096 complex points | 1288199 | 1250372 | 1.03 | 6.2% |
| all-pairs Bellman-Ford, 64 nodes, 128 edges | 594460 | 310375 | 1.91 | 0.2% |

The vectors, the copied block, the sorted array and the transform have the
evaluated sizes. The transform is a radix-2 FFT with every twiddle factor set
to 1, which is a Walsh-Hadamard transform: the same loads and stores as the
FFT, with results that integers can check exactly. Each thread transforms
one 2048-point half, and thread 0 then runs the last stage over both.
Bellman-Ford runs once per source on a random graph, and its distances are
compared with a Floyd-Warshall computation.
The counter reaches 1024 rather than 2^20, and the matrices are 32 × 32
rather than 128 × 128, to keep the simulation short.

The shape is what a shared, blocking memory unit leads one to expect:
- The dot product gains most, because its loads hit most of the time and
  the two threads overlap their hits.
- Daxpy gains less, because every element also costs a write-through store.
- The memory copy is bound by line fills, which the two threads cannot
  overlap, so it does not gain at all.
- The locked counter is serial by construction.
- Merge sort stores one word for every word it reads. Every store goes
  through to memory, and the bus model takes one write about every 7
  cycles, so the shared write path sets the pace for one thread or two.
- Matrix multiply reads two words per multiply and writes rarely, so its
  hits overlap almost perfectly across the threads.
- Each butterfly of the transform stores four words for its four loads, so
  it too is paced by the write-through path. Its 64 KB of data is twice the
  cache, and the wide stages miss on their partner lines.
- Bellman-Ford, like matrix multiply, mostly reads: the 3 KB edge list and
  one 512-byte row of distances per source stay in the cache, and the rare
  stores that shorten a distance cost little.

The pipeline model here issues one access every two cycles or more, so the
absolute numbers say little about a real pipeline.

The reference evaluation reports an 87% data cache miss rate for the memory
copy. That does not follow from 64-bit copies through a write-allocate
cache. Each 64-byte line takes 8 loads and 8 stores but only 2 misses,
which is 12.5%. The reference figure presumably counts misses differently,
or uses a different access size.

### Working sets

The data cache holds 32 KB. Sizes from the reference evaluation set
against it:

| workload | data | fits? |
|---|---|---|
| dot product or daxpy, two 1024-element double vectors | 16 KB | yes |
| merge sort, 1024 integers with a buffer | about 8 KB | yes |
| all-pairs Bellman-Ford, 64 nodes | about 17.5 KB | yes |
| two copies of CoreMark | about 4 KB | yes |
| 128 × 128 double matrix multiply | 384 KB | no: streams through the cache |
| 4096-point complex FFT | 64 KB | no: streams through the cache |
| 32 KB memory copy | 64 KB | no: misses on most lines |

## Files

RTL (`rtl/`):

| file | block |
|---|---|
| `dt_pkg.sv` | types, constants and encodings |
| `dual_thread_core.sv` | top |
| `instr_buffer.sv` | per-thread instruction buffer |
| `icache_mux.sv`, `dcache_mux.sv` | cache multiplexors |
| `icache.sv`, `dcache.sv` | caches |
| `mmu.sv`, `tlb.sv` | MMU and its TLB |
| `thread_ctrl.sv`, `debug_aggregator.sv` | control units and aggregator |

Testbenches (`tb/`): `tb_<block>.sv` for every block, `tb_workloads.sv` for
the kernels above, plus two behavioural memories.
- `cache_mem_model.sv` is an MMU-and-memory model at the cache's memory port.
- `sys_mem_model.sv` is a system-bus memory with a 30-cycle line fill.

`tb_dual_thread_core.sv` runs the whole design at its default sizes. Two
processes stand in for the pipelines, and a memory image holds code, data
and page tables. The run:
1. Enables translation and starts thread 1 through the debug port.
2. Times several side-kick round trips.
3. Computes a dot product split into even and odd halves.
4. Runs straight-line code on both threads.
5. Has both threads increment a counter 50 times each under the data cache
   lock.
6. Makes non-cacheable accesses, a load from an unmapped address, and a
   store to a read-only page.
7. Stops thread 1.

Along the way it checks every fetched instruction pair, the results, the
errors, the mode change, the written-through memory, and the referenced
and modified bits in the page tables. It counts each
mechanism and fails if any never happened:
- instruction buffer hits;
- cache hits and misses;
- stalls behind the other thread's miss;
- same-cycle requests from both threads;
- lock stalls;
- TLB hits and walks;
- the faults, including the refused write-through;
- the non-cacheable path;
- thread start and stop.

Every testbench prints `TB_RESULT checks=N failures=M` at the end. To run one
with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_dcache \
    -y rtl -y tb +libext+.sv rtl/dt_pkg.sv tb/tb_dcache.sv
./obj_dir/Vtb_dcache
```

Replace `tb_dcache` with any other testbench; the full-size end-to-end run
takes a few seconds. The unit testbenches compare against reference models
written in the testbench:
- the caches against a flat memory image, with random traffic;
- the TLB and MMU against translations, page-table bits and permission
  outcomes worked out by hand;
- the multiplexors against grant sequences;
- the control units against mode sequences.
