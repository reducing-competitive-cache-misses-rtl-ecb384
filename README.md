# A thread-partitioned L1 for a multithreaded core

When several hardware threads share one first-level cache, a miss by one
thread picks its victim from the whole cache and can throw out a block that
another thread is about to use. That thread then misses too, and the two
keep evicting each other's data. Prisagjanec and Mitrevski ("Reducing
Competitive Cache Misses in Modern Processor Architectures") call these
*competitive cache misses* and propose a small change to L1 replacement:

* **lookups use the whole cache.** Any thread hits on any block, whoever
  brought it in;
* **refills use only the missing thread's share.** The L1 is split into as
  many equal "virtual" parts as there are threads. A block loaded after a
  miss may only replace a block in the requesting thread's own part.

Blocks are still shared, but no thread's misses can evict another thread's
data. The price is capacity. With few active threads, the idle threads'
partitions still hold their lines, so each active thread can refill only a
quarter of the L1. The same paper keeps data prefetching but moves its target
from L1 to L2, so that early loads do not compete for the first level either.

This RTL is the memory side of such a design: a 4-thread core's L1 with
partitioned refill, an L2 and an L3, a controller that serves misses, and
the L2 prefetch queue. The core itself and the main memory are outside the
design. Their connections are ports.

## Block diagram

```
 thread 0..3 requests          core front end (addresses of decoded memory instructions)
        |                                   |
  thread_arbiter  (1 lookup / cycle)    prefetcher (4-entry queue)
        |                                   |
  l1_partitioned_cache  --miss-->  miss_controller  <--prefetch--+
   128 lines, 4 x 32 partitions     |  fifo_cache L2 (256 lines) |
   hit -> response next cycle       |  fifo_cache L3 (512 lines) |
        ^                           |           |
        +------ refill into the     +--> main memory port (valid/ready + response)
                missing thread's partition
```

All of it is in `cmc_top`. Shared constants and types are in `cmc_pkg`.

## The L1: shared lookup, private refill

`l1_partitioned_cache` is fully associative. Each line holds one address
(the block), one data word, a valid bit and an **owner tag**: the number of
the thread that refilled it. The 128 lines form four fixed partitions of
32. Lines 0-31 belong to thread 0, lines 32-63 to thread 1, and so on.

* **Lookup:** the address is compared with all 128 lines. A hit returns the
  data and the owner tag. `cmc_top` counts a hit whose owner is not the
  requester as a *shared hit*. Shared hits are the sharing that the technique
  keeps.
* **Refill:** the victim is always in the refilling thread's partition. Each
  partition has its own round-robin pointer, so blocks leave in FIFO order
  within the partition. After reset the pointer starts at the partition's
  first line, so free lines fill before anything is evicted. The owner tag of
  the new line is set to the refilling thread. An assertion checks that a
  refill only takes a free line or one the same thread owns.

Because the partitions are fixed, the owner tag of a line always equals its
partition number. The tag is kept because the technique is defined by it: it
tells a lookup who owns the block, and the check above relies on it. A design
that gave partitions different sizes could choose the victim from the tag
alone.

One sentence of the source, about dividing the cache "by the number of
threads that access the memory", could be read as a split that follows the
number of active threads. The same text says the technique reduces the usable
L1 when few threads are active, and that only holds for a fixed split. So the
split here is fixed by the number of hardware threads.

The replacement order is FIFO because the authors' evaluation model uses
FIFO: it deletes the oldest entry and appends the new one. The text only
asks for "a known replacement technique". Another policy would change only
the pointer logic.

## Where a miss goes

`miss_controller` serves **one request at a time**, as the authors' model
does. It looks for the block in L2, then L3, then main memory. It copies the
block into every level above the one that held it:

| block found in | refilled                 | wait inside the controller |
|----------------|--------------------------|----------------------------|
| L2             | L1                       | `L2_LAT` = 3 cycles        |
| L3             | L2, L1                   | `L3_LAT` = 10 cycles       |
| main memory    | L3, L2, L1               | the memory's own latency (60 in the model) |

L2 and L3 (`fifo_cache`) are fully associative caches with one FIFO
pointer each, and they are not partitioned. The 2.5, 10 and 60 time units of
the evaluation model are used as clock cycles, with 2.5 rounded up to 3. The
model's random jitter on these times is left out.

Misses are counted per level, for demand accesses only. These counts are the
columns of a miss table: L1, L2 and L3 misses.

### Latency seen by a thread

Counted from the cycle in which the request is looked up:

| outcome            | cycles to `resp_valid` |
|--------------------|-----------------------|
| L1 hit             | 1                     |
| L2                 | `L2_LAT` + 3 = 6      |
| L3                 | `L3_LAT` + 3 = 13     |
| main memory        | memory latency + 4 = 64 |

The extra cycles over the wait are one lookup cycle in the controller, one
refill cycle and the registered response. On the memory path there is also
one cycle for the request handshake.

### One miss in flight

A thread that misses waits for its refill. The other threads keep looking
up the L1 and are answered on hits. If a second thread misses while a miss is
in service, the lookup is refused and the request stays pending. The thread
retries when the arbiter reaches it again. This event is counted as a *busy
stall*. Because the controller is never idle while a refill is being written,
a refused lookup cannot race with that refill. So the same block can never be
present twice.

## Prefetching into L2

`prefetcher` is a FIFO of `PF_DEPTH` = 4 addresses. The core's front end
presents the address of each memory instruction it decodes (`pf_in_*`). The
controller takes the oldest address whenever it is idle and no demand miss is
waiting, so demand misses always go first. For each address:

* if the block is already in L2, the address is dropped;
* otherwise the block is loaded into L2, and also into L3 if it came from
  memory. A prefetch never writes the L1.

If the queue is full, the new address is dropped. Both kinds of drop are
counted. The depth comes from the authors' prefetch sweep, where 4 to 6
prefetched instructions gave the fewest misses. The source gives the
prefetcher's purpose only. The queue, the priority and the drop rules are the
simplest way to build it.

## Interface of `cmc_top`

| port | direction | meaning |
|------|-----------|---------|
| `req_valid[t]`, `req_addr[t]` | in | access of thread `t`, held until its response |
| `resp_valid[t]`, `resp_data[t]`, `resp_src[t]` | out | one-cycle response; `resp_src` is `SRC_L1/L2/L3/RAM` |
| `pf_in_valid`, `pf_in_addr` | in | address for the prefetch queue |
| `mem_req_valid`, `mem_req_addr`, `mem_req_ready` | out/out/in | main-memory request, valid/ready |
| `mem_resp_valid`, `mem_resp_data` | in | main-memory data, one-cycle pulse |
| `counters` | out | `counters_t`: accesses, L1/L2/L3 misses, shared hits, L1 evictions, busy stalls, prefetches loaded and dropped |

A thread's request is not looked up in the cycle in which its response is
shown. A thread that puts its next request out right after a response
therefore sees one extra cycle. Reset is asynchronous and active low. It
clears valid bits, pointers and counters. Array contents are not reset: they
are read only behind a valid bit.

## Parameters and where they come from

| parameter (package / module) | default | origin |
|------------------------------|---------|--------|
| `NUM_THREADS` / `THREADS` | 4 | the evaluated core has 4 threads |
| `L1_LINES` / `L1_SIZE` | 128 | capacity in the authors' simulator |
| `L2_LINES` / `L2_SIZE` | 256 | same |
| `L3_LINES` / `L3_SIZE` | 512 | same |
| `L2_LAT` | 3 | 2.5 units, rounded up |
| `L3_LAT` | 10 | same source |
| `RAM_LAT` (memory model) | 60 | same source |
| `PF_DEPTH` / `PF_Q` | 4 | best range 4 to 6 in the prefetch sweep |
| `ADDR_W`, `DATA_W` | 32 | own choice; the evaluation used addresses 1..500 |

`THREADS` must divide the L1 into partitions of at least two lines.

## How far it follows the source, and where it departs

Taken from the source: the technique itself (lookup everywhere, refill in
the own partition, owner tag per line), four threads, the capacities, FIFO
replacement, the search order and the refills at each level, one outstanding
miss, the latencies, prefetching into L2 only, and a prefetch depth in the
best range.

This design's own choices, because the source does not give them:
* Cache lines hold a single address and data word, and all caches are fully
  associative. The evaluation model stored bare addresses in lists. A real
  L1 would have multi-word lines and set associativity. Either change would
  keep the partitioning idea: partition the ways, or the lines of each set.
* Round-robin arbitration gives one L1 lookup per cycle.
* Refused misses are retried rather than queued.
* The thread request/response protocol.
* The prefetch queue, its priority and its drop rules.
* Address and data widths.
* Latencies are in whole cycles.

Not built:
* The processor core (decode, instruction window, execution). The source
  describes it only as an abstract simulation model in which instructions are
  just "memory access or not" plus an address.
* Main memory, an off-chip part.

The shared-FIFO baseline L1 and the ideal no-miss processor the authors
compare against are not part of this design.

## Simulation

Each module has a self-checking testbench in `tb/`. Each one compares the
module with an independent reference model written in the testbench and
prints `TB_RESULT checks=N failures=M`:

| testbench | what it checks |
|-----------|----------------|
| `tb_thread_arbiter` | grant order against a round-robin model |
| `tb_l1_partitioned_cache` | hits, data, owner tags and victims against per-thread FIFO lists; thread 1 streams 200 blocks and thread 0's 32 blocks must all survive |
| `tb_fifo_cache` | 256- and 512-line instances against a FIFO list |
| `tb_miss_controller` | source level, data, thread and exact cycle count of every miss; prefetch loads and drops; counters (small L2/L3 so blocks move between levels) |
| `tb_prefetcher` | queue order, fill level and drops |
| `tb_cmc_top` | the whole system at default sizes; see below |
| `tb_prefetch_sweep` | prefetch depths 2 to 16, eight full systems side by side (helper `sweep_lane`) |

`tb_cmc_top` first runs a directed sequence. It covers a cold miss, a shared
hit, partition isolation under a 200-block stream, L2 and L3 hits with their
exact latencies, a prefetch that turns a later miss into an L2 hit, both kinds
of prefetch drop, and a busy stall. It then runs the evaluation workload:
4 threads, 4500 memory accesses (22.5 % of 20000 instructions) with addresses
drawn from a triangular distribution over 1..500. Each thread's access four
ahead is fed to the prefetch queue. A monitor models the L1 per thread and
flags any hit or miss that the partitioned refill rule would not produce.
At the end, the testbench checks that every mechanism occurred and that the
hardware counters agree with the monitor. It needs `tb/ram_model.sv`, a
behavioural memory with a 60-cycle latency, and `tb/cmc_tb_pkg.sv`. The
memory returns `addr * 0x9E3779B1 ^ 0x5A5A5A5A` as the data word.

One run of the workload (seed dependent) takes about 55 000 cycles for the
4500 accesses, plus 22 000 for the directed part. Most prefetches are dropped
in this workload. The controller is almost always busy with demand misses,
which have priority, so the queue stays full.

### Prefetch depth sweep

`tb_prefetch_sweep` runs one thread through the same 1000-access program in
eight copies of the system, each with a different prefetch queue depth (2,
4, ..., 16). Between memory accesses the thread runs other instructions, one
per cycle, each of which is a memory access with probability 0.225. Before
each access, the thread offers the address of the access `depth` places
ahead. One run gave:

| depth | L1 misses | L2 misses | prefetches loaded | cycles |
|------:|----------:|----------:|------------------:|-------:|
| 2  | 936 | 3  | 458 | 33144 |
| 4  | 936 | 6  | 457 | 33101 |
| 8  | 936 | 12 | 454 | 33178 |
| 16 | 936 | 23 | 447 | 33252 |

Two properties of the design show here:
* L1 misses do not depend on prefetching at all, because prefetches only fill
  L2.
* A single thread misses in L1 almost every time. It can refill only its own
  32 lines, while the other 96 lines stay empty. This is the capacity loss
  under a light load that the technique accepts.

The L2 misses rise with depth because prefetched blocks are loaded so early
that some have already left the L2 by the time they are used.

### Running

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/cmc_pkg.sv tb/cmc_tb_pkg.sv rtl/*.sv tb/ram_model.sv tb/tb_cmc_top.sv \
  --top-module tb_cmc_top -Mdir obj_top
obj_top/Vtb_cmc_top
```

The other testbenches run the same way with their own file and top module.
All of them run in well under a second.

## Known limits

* Timing is cycle-level but not tuned for a clock target. The fully
  associative compare across 128 to 512 lines is fine in simulation but
  large in hardware.
* Only one miss is in service at a time, as in the evaluation model. There is
  no miss queue and no hit-under-miss for the missing thread.
* With fewer than four active threads, the idle partitions hold data that
  only hits can use. This is the capacity loss the technique accepts.
