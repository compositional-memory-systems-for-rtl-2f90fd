# Set-partitioned shared L2 cache for communicating multimedia tasks

On a multiprocessor that shares one level of cache, tasks evict each other's
lines. How much they do depends on timing and on where their data happens to land,
so the performance of one task depends on every other task. The system is not
*compositional*: you cannot predict the whole from its parts, and adding a task can
change the timing of all the others.

This design removes that interaction in hardware. The sets of the shared L2 cache
are divided into exclusive partitions. Each partition belongs to one task, or to one
memory object that several tasks share: a communication FIFO, a frame buffer, or a
static data or bss section. Every access is tagged with the owner's id. The cache
then replaces the set index taken from the address by an index inside that owner's
partition. Two owners never share a set, so one cannot evict the other's lines.
A task's miss count then depends only on its own accesses and its partition size.

The RTL models one tile of such a chip:

- four processor ports (the processors and their private L1 caches sit outside);
- a 512 KB, 4-way L2 built from four memory banks;
- a crossbar between the processor ports and the banks;
- one port to off-chip main memory.

The partitioning approach, the 512 KB 4-way cache, the four processors, the banked
organisation and the two tables that drive the translation come from the published
method. The line size, bank count, id width, protocols and replacement policy are
this implementation's choices. They are listed in
[Where this RTL goes beyond the description](#where-this-rtl-goes-beyond-the-description).

## How an access finds its sets

```
 cpu_req.addr ──┬──────────────► range_table ──hit,buf_id──┐
                │                                          ▼
 task_id_regs[port] ─────────────────────────────────► id = hit ? buf_id : task_id
                │                                          │
                └─ index = addr[16:6] ──► partition_table[id] = {base, log2}
                                                           │
                            set = base + (index mod 2^log2)│   (11 bits, 2048 sets)
                                                           ▼
                            bank = set[1:0], set in bank = set[10:2]
```

1. **Which owner.** `range_table` holds up to 32 address intervals loaded by the
   operating system (inclusive `first`..`last`, each with a buffer id). If the address
   falls in one, the access belongs to that buffer. This holds whichever processor or
   task issues the access. So a FIFO's producer and consumer both use the FIFO's
   partition, and the consumer finds the lines the producer wrote. Any other access
   belongs to the task in the issuing processor's task-id register. Buffer ids win
   over task ids. If intervals overlap, the lowest-numbered entry wins.
2. **Which sets.** `partition_table` has one entry per id (64 ids). Each entry holds
   the first set of the partition (`base`) and its size as a power of two (`log2`,
   1 to 2048 sets). The partition set is `base + (index mod 2^log2)`, where `index` is
   the usual set-index field of the address. Partition sizes are powers of two, as in
   both published allocations, so the modulo is a mask. `base` can be any set; the
   sum wraps at 2048.
3. **Which bank.** The two low bits of the translated set pick one of the four banks.
   The remaining nine bits pick the set inside that bank. A partition of two or more
   sets is therefore spread over several banks.

After reset every partition-table entry is `{base 0, log2 11}`: every id sees the
whole cache, and the tile behaves like a conventional shared L2. Partitioning starts
once the operating system has written the table.

### Why the tag is the whole line address

A conventional cache stores only the address bits above the index. Here the index
no longer comes from fixed address bits. A one-set partition uses none of them, and
a 32-set partition uses five. Two addresses that differ only in the dropped index
bits would look identical if the tag kept only the upper bits. Each line therefore
stores its complete 26-bit line address as the tag. This costs 11 bits per line
compared with a conventional 512 KB cache. In exchange, any mapping is correct: a
lookup never matches a line that belongs to another address.

### What the operating system must guarantee

The hardware does not check any of the following. Software has to get them right.

- **Partitions must not overlap.** Otherwise owners evict each other again.
- **Ids must be consistent.** Every shared object gets its own id and interval.
  Tasks get their own ids, written to the task-id register of the processor a task
  runs on at each task switch.
- **FIFOs must be sized to their partition.** A FIFO is predictable only if every
  access after the first touch hits. Its partition must therefore hold the whole
  FIFO: (FIFO bytes / 64) lines in 4 ways, i.e. FIFO bytes / 256 sets.
- **Change the tables only on an empty cache.** There is no flush. If a mapping
  changes while lines are cached, a line can remain in its old set and a second copy
  can be fetched into the new one. The published use case fixes all allocations
  during initialisation.

## Blocks

| module | role |
|---|---|
| `l2p_pkg` | sizes and the request/response structs shared by all blocks |
| `task_id_regs` | one task-id register per processor, written through one configuration port |
| `range_table` | shared-memory interval table, one combinational lookup per processor port |
| `partition_table` | per-id partition base and size; translates the set index for every port |
| `l2_index_translator` | combines the two tables and the task ids into (id, set) per port |
| `l2_interconnect` | crossbar from 4 ports to 4 banks, one round-robin `rr_arbiter` per bank |
| `l2_bank` | one cache bank: 512 sets x 4 ways x 64 B, blocking controller |
| `mem_arbiter` | shares the single off-chip port among the banks, one transaction at a time |
| `l2p_tile` | top level: wires all of the above |

### The cache bank

`l2_bank` serves one request at a time with this state machine:

| state | what happens | next |
|---|---|---|
| INIT | after reset, one cycle per set clears valid and dirty bits and loads LRU ages 0..3 (512 cycles); `init_done` then rises | IDLE |
| IDLE | `req_ready` is high; the request is latched | TAG |
| TAG | all four tags are compared | hit: ACCESS; miss with dirty victim: WB; other miss: FILL |
| WB | the victim line is written to memory | FILL |
| FILL | the line is requested from memory, then written into the victim way when it arrives | ACCESS |
| ACCESS | the word is read, or the byte-strobed write is merged; LRU ages are updated; `rsp_valid` pulses for one cycle | IDLE |

- **Victim choice:** the first invalid way; if all ways are valid, the way whose
  2-bit age is 3 (true LRU).
- **Write policy:** write-back and write-allocate.
- **Storage:** tags, per-set state and data are plain arrays, so a synthesis flow can
  map them onto SRAM.

### Timing

- **Uncontended hit:** the response is valid two cycles after the cycle in which
  `cpu_req_ready` was high (accept, TAG, ACCESS).
- **Miss:** write-back (if any) plus refill latency plus two cycles.
- **Contention:** ports that go to different banks work in parallel. Ports that go
  to the same bank wait their round-robin turn. A bank is busy for the whole of a
  miss.
- **Off-chip port:** serves one refill at a time and is shared by all banks.
- **After reset:** requests are held off until all banks have finished INIT.

### Interfaces of the top (`l2p_tile`)

- **Processor ports (per port):**
  - Request: `cpu_req_valid` / `cpu_req_ready` and `cpu_req` = {addr, we, wstrb, wdata}.
    The request must stay stable until it is accepted.
  - Response: `cpu_rsp_valid` (one-cycle pulse, no back-pressure) and `cpu_rsp` =
    {rdata, hit, id}. `hit` and `id` let software or a monitor count misses per task
    and per buffer.
  - At most one request may be outstanding per port.
- **Configuration** (each write takes effect on the next clock edge):
  - `cfg_tid_*`: task-id register of one processor;
  - `cfg_rng_*`: one interval-table entry {valid, first, last, id};
  - `cfg_part_*`: one partition-table entry {base, log2}.
- **Main memory:**
  - `mem_req_valid` / `mem_req_ready` with `mem_req` = {we, line address, 512-bit line}.
    A write-back is finished when it is accepted.
  - A refill is answered later by a one-cycle `mem_rvalid` with `mem_rdata`.

### Parameters

| parameter | default | origin |
|---|---|---|
| `N_CPU` | 4 | published: four processors |
| `L2_BYTES` | 524288 | published: 512 KB |
| `WAYS` | 4 | published: 4-way |
| `N_BANKS` | 4 | chosen (the bank count is not given) |
| `LINE_BYTES` (package) | 64 | chosen; gives 2048 sets |
| `ID_W` (package) | 6 | chosen: 64 ids for tasks and buffers together |
| `N_RANGES` | 32 | chosen |
| `N_IDS` | 64 | chosen |

`L2_BYTES / (64 * WAYS)` must be a power of two divisible by `N_BANKS`.

## Published allocations and how they fit

The method was evaluated with two applications, each partitioned with an integer
linear program that minimises total misses:

| application | entries | published sets | left of 2048 |
|---|---|---|---|
| two jpeg decoders + canny edge detector | 15 tasks, 4 data sections | 166 | 1882 for FIFOs and frame buffers |
| mpeg2 decoder | 13 tasks, 4 data sections | 90 | 1958 for buffers |

Individual allocations run from 1 set (IDCT tasks, mpeg2 `memMan` and `output`) up
to 32 sets (the first jpeg rasteriser). The buffers' allocations were not published.
Both applications name about 20 buffers, which fits within the 64 ids and 32
intervals. A comparison run used a 1 MB shared L2. Setting `L2_BYTES = 1048576`
builds that size, but it has not been simulated.

## Verification

Each testbench checks its block against models written independently of the RTL:
a golden word memory, an LRU cache model (`l2p_ref_pkg::cache_ref`) and direct
searches of the tables. Each ends by printing
`TB_RESULT checks=N failures=M`.

| testbench | what it shows |
|---|---|
| `tb_task_id_regs` | writes reach only the addressed register, one cycle later |
| `tb_range_table` | hits at and just outside interval bounds, priority of overlapping entries |
| `tb_partition_table` | identity mapping after reset; `base + (index mod size)` always lands inside the partition |
| `tb_l2_index_translator` | buffer ids override task ids; translated sets for 64 programmed partitions |
| `tb_l2_bank` | 8-set bank, 3000 random accesses: data, hit flag, write-back and refill counts, 2-cycle hit latency, init length |
| `tb_l2_interconnect` | responses return to the issuing port, fairness bound, contention occurs |
| `tb_mem_arbiter` | refill data returns to the right bank, never two refills in flight |
| `tb_l2p_tile` | full default size, three phases (below) |
| `tb_workload_alloc` | full default size, loads both published allocations (below) |

`tb_l2p_tile` runs three phases:

1. A task runs alone.
2. The same task runs while three other processors stream through memory, write
   and read a shared FIFO, and switch tasks.
3. The same traffic runs with the partition table left at reset, i.e. a
   conventional shared cache.

It checks that:

- the first task's hit/miss sequence is identical in phases 1 and 2 (compositionality);
- in phase 3 the other traffic adds misses to that task;
- the FIFO, sized to its partition, misses only on its 16 cold lines.

It also counts hits, misses, write-backs, bank stalls, buffer accesses and task
switches, and requires each of them to occur.

`tb_workload_alloc` loads both published allocations. Every task and data section
then sweeps exactly its partition's capacity three times, interleaved at random over
the four processors. Each entry must miss exactly once per line.

To run a test with plain Verilator (here the top-level one):

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/l2p_pkg.sv tb/l2p_ref_pkg.sv tb/tb_l2p_tile.sv --top-module tb_l2p_tile
./obj_dir/Vtb_l2p_tile
```

For another testbench, replace `tb_l2p_tile` with its name. `tb/main_mem_model.sv`
is a behavioural main memory with a fixed refill latency. Lines that were never
written read as `l2p_ref_pkg::init_word(address) = (address * 0x9E3779B1) xor
0x5BD1E995`.

## Where this RTL goes beyond the description

The published method defines what the hardware has to do: label accesses with a
task id or a buffer id, replace the index through an id-indexed table, and find
buffer ids in an OS-loaded interval table. It does not define how. All of the
following are this implementation's own choices:

- **Cache geometry:** 64-byte lines, four banks, bank selection by the low bits of
  the translated set.
- **Id space:** 6-bit ids shared by tasks and buffers. A buffer id takes precedence
  over the task id.
- **Translation formula:** `base + (index mod 2^log2)`. Reset state = unpartitioned.
- **Tags:** the whole line address is stored as the tag.
- **Cache behaviour:** write-back, write-allocate, true LRU, a blocking bank
  controller, and clearing the cache by sweeping all sets after reset.
- **Interconnect and memory port:** a crossbar with round-robin arbitration, no
  snooping (there are no L1 caches on these ports to keep coherent), and an off-chip
  port with one transaction in flight.
- **Interfaces:** valid/ready request handshakes and response pulses without
  back-pressure.

The processors, their L1 caches, the tile router and main memory are outside this
RTL.
