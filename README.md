# An adaptive GPU cache hierarchy for machine-intelligence workloads

Machine-intelligence kernels (convolution layers, activations, pooling,
GEMMs, recurrent cells) stream large tensors through a GPU that shares its
memory coherently with a CPU. Caching their data in the GPU's L1 and L2 helps
where there is reuse, but it also costs: requests wait for cache allocation
("cache stalls"), and stores held back in the L2 to be combined reach DRAM
later and out of row order, which lowers the DRAM row-buffer hit rate. No
single static policy suits every kernel.

This RTL implements the memory side of such an APU with the most aggressive
policy, **CacheRW**, plus three optimizations layered on it:

1. **Allocation bypass** – a request that would have to wait because every
   way of its set is occupied by a pending miss is sent to memory uncached
   instead of stalling.
2. **Cache rinsing** – a *dirty block index* records which lines of each DRAM
   row are dirty in the L2; when a dirty line is evicted, the other dirty
   lines of the same row are written back with it, so DRAM sees them as row
   hits.
3. **PC-based L2 bypassing** – a small table of counters, indexed by the
   requesting instruction's PC, learns which instructions bring in lines
   that are never reused; their misses then skip L2 allocation.

## Hierarchy

```
 CU 0 .. CU 63 data ports       CU-pair instruction ports (32)
      |                               |
 gpu_l1_dcache x64 (16 KB)       gpu_l1_icache x32 (32 KB)
      \_______________  _____________/
                      \/
              req_arbiter (96 -> 1 crossbar)
                      |
              gpu_l2_cache (4 MB, 16-way)
              |- dirty_block_index
              |- pc_bypass_predictor
                      |
              mem_interconnect  <---- CPU port (last-level CPU cache)
                      |
                   HBM port
```

`gpu_mem_system` is the top. The compute units, the CPUs and the HBM device
are not included; their traffic enters and leaves on the top's ports. All
caches use 64-byte lines and 16 ways.

## Request and response format

All levels speak one format, defined in `gpu_cache_pkg`:

* `creq_t` – `op` (load/store), 28-bit line address (34-bit byte address,
  16 GB), 48-bit PC, 64-bit byte mask, 512-bit data, 16-bit id.
* `crsp_t` – `op`, `id`, 512-bit data. A load returns the whole line; a
  store is acknowledged with `op = OP_STORE`.

Each interface is a valid/ready pair; a transfer happens on a clock edge
where both are high, and a sender keeps its request stable until then.

Ids: a CU's id comes back on its response unchanged. Each cache uses its
MSHR number as the id of its own downstream requests. The crossbar puts its
7-bit port number into the top of the id, and the interconnect marks bit 15
with its client, so ids on the CPU port must keep bit 15 clear.

## The shared cache controller (`gpu_cache`)

All three cache kinds are one controller with different parameters:

| | L1 D | L1 I | L2 |
|---|---|---|---|
| size | 16 KB | 32 KB | 4 MB |
| stores | update present copy, forward | never issued | combined (write-back) |
| allocation bypass | on | on | on |
| rinsing | off | off | on |
| PC bypass | off | off | on |
| MSHRs | 32 | 8 | 32 |

The controller is a single state machine that handles one request at a
time, with many misses in flight.

### Line states and byte-dirty masks

Each way holds one of four states:

* `INV` – invalid.
* `PART` – only some bytes are valid; these are the bytes written by stores.
* `FULL` – all bytes are valid.
* `PEND` – a miss for the line is in flight.

Each way also has a 64-bit dirty mask. A store to an absent line in the L2
allocates the line as `PART` and never reads memory. A load of a `PART` line
fetches the line. The returning data is merged under the inverse of the
dirty mask, so bytes that were stored are never overwritten.

Write-back (on eviction, rinse or flush) sends only the dirty bytes, using
the request's byte mask.

### MSHRs and coalescing

A miss allocates an MSHR that holds up to `NUM_TARGETS` waiting requests. A
later load to the same line joins that list (coalescing) instead of going to
memory again. Uncached (bypassed) loads also hold an MSHR, so requests for a
line that is being read uncached still coalesce.

When the data returns, every target is answered in order. Only a cached miss
also writes the line into the array.

### Stalls

A request stalls and waits in the controller's input register in these
cases:

* no MSHR is free;
* its MSHR's target list is full;
* it needs to refill a `PART` line whose miss is already pending;
* without allocation bypass, all ways of its set are `PEND`.

Each stalled cycle is counted.

### Allocation bypass

When every way of a set is `PEND` and an MSHR is free, a load is sent
downstream uncached and a store is forwarded straight to memory. Neither
waits for a way.

### Cache rinsing

The L2 tells the dirty block index about three events:

* a line becomes dirty;
* a dirty line is evicted;
* the L2 is flushed.

On an eviction, the index returns the other dirty lines of the same DRAM
row. A DRAM row is 32 consecutive lines (2 KB). These lines go into a small
rinse queue. The controller writes each one back in idle cycles and marks
its bytes clean. Lines that are still `PEND` are skipped. Their dirty bytes
are written later by a normal eviction or by the flush, so correctness
never depends on the index.

The index is direct-mapped, with 512 entries. If a new row displaces an
entry whose row still has dirty lines, that row is rinsed too.

### PC-based bypassing

Every L2 line remembers a signature of the PC that brought it in and
whether it has been reused. The signature is an XOR fold of PC bits
[17:2] into 8 bits. Each signature has a 3-bit saturating counter:

* A hit on a line decrements the counter of that line's signature.
* Evicting a line that was never reused increments its counter.

A miss whose PC counter is at least 4 is predicted dead. It does not
allocate:

* a load becomes an uncached read with an MSHR;
* a store is forwarded to memory.

Every 32nd predicted-dead miss is cached anyway. This lets a PC whose
behaviour changes be retrained.

### Synchronisation

* `SYNC_INV` marks a kernel boundary. Each cache drops all clean data and
  keeps dirty bytes.
* `SYNC_FLUSH` marks a system-scope release. The L2 walks all its sets and
  writes back every dirty line.

Both commands wait until the cache has no misses outstanding. The top
sends `SYNC_INV` to all 97 caches and `SYNC_FLUSH` to the L2 only, since the
L1s hold no dirty data. It then pulses `sync_done` once every cache that
was addressed has finished.

### Timing

Reset clears the tag arrays: the controller walks every set once, which
takes one cycle per set. The L2 has 4096 sets; an L1 D-cache has 16.

After reset, a load hit is answered two cycles after it is accepted. A
miss costs a few cycles of the controller's time before it goes downstream.
The line is returned a few cycles after its data arrives.

Each array is read combinationally, in the same cycle as the lookup. This
keeps the state machine simple. A real implementation with SRAM macros
would add a pipeline stage.

### Deadlock freedom

Responses from below are always accepted. A cache can have at most
`NUM_MSHR` reads outstanding, and it has a fill queue of that depth. So a
cache that is blocked sending upward never blocks the level beneath it.

## Crossbar and interconnect

`req_arbiter` grants one of its 96 requesters per cycle, round-robin. It
routes responses back by the port number held in the id.

`mem_interconnect` shares the HBM port between the L2 and the CPU. When
both request in the same cycle, it alternates between them.

## Statistics

Each cache exports a `cache_stats_t` with these counters:

* requests, hits, misses;
* coalesced requests;
* stall cycles;
* allocation bypasses, PC bypasses;
* eviction, rinse and flush write-backs.

## Where this design goes beyond, or departs from, the description it follows

* The source table calls the L2 "write-through (write-back for R data)",
  while the CacheRW policy combines stores in the L2. This RTL follows
  CacheRW: written bytes stay in the L2 until eviction, rinse or flush.
* Allocation bypass is also applied in the L1s, not only in the L2.
* These values are this design's own choices:
  * MSHR and target counts;
  * the DRAM row size used for rinsing (32 lines);
  * the size and organisation of the dirty block index;
  * the predictor's table size, hash, threshold and sampling;
  * replacement (round-robin, preferring invalid ways);
  * the id scheme;
  * the sync sequencing.
* Coherence with the CPU caches is not modelled; this design has no system
  directory. The CPU port is only a second client of the memory.

## Simulating

Every testbench in `tb/` checks itself. At the end it prints
`TB_RESULT checks=N failures=M`. Build and run one with Verilator:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  --top-module tb_gpu_l2_cache -y rtl -y tb +libext+.sv \
  rtl/gpu_cache_pkg.sv tb/tb_gpu_l2_cache.sv
./obj_dir/Vtb_gpu_l2_cache
```

| testbench | what it covers |
|---|---|
| `tb_gpu_l2_cache` | full 4 MB L2 against an HBM model and a shadow memory: hit and miss latency, coalescing, store combining, allocation bypass, rinsing (row hits checked), PC bypass, flush and invalidate |
| `tb_gpu_l1_dcache` | write-through stores, hits, coalescing, allocation bypass, invalidation |
| `tb_gpu_l1_icache` | fetches from two CUs, coalescing, hits, invalidation |
| `tb_dirty_block_index` | directed and 20 000 random operations against a reference model |
| `tb_pc_bypass_predictor` | training, threshold, sampling, against a reference model |
| `tb_req_arbiter` | 96 ports, random traffic, fairness and response routing |
| `tb_mem_interconnect` | random traffic from both clients, alternation, routing |
| `tb_gpu_mem_system` | end to end: 4 CUs, 2 instruction caches and a 64 KB L2, everything else at full size |

In the end-to-end test, all CUs, the
instruction caches and the CPU port run a small kernel-like program
concurrently:

* shared reads;
* partial stores to one DRAM row;
* a streaming burst into one set;
* dead-PC streaming.

The program is followed by a flush and an invalidate. The test checks the
data of every load, and it checks that memory equals a shadow copy after
the flush. It also counts every mechanism and fails if any of them never
occurred:

* L1 hit, coalescing and allocation bypass;
* L2 hit, coalescing and allocation bypass;
* stall;
* dirty eviction, rinse and PC bypass;
* flush write-back.

`tb/hbm_model.sv` is the memory model used by these tests; it is not part of
the design. Loads are answered in order after a fixed latency, and each
bank counts row hits and misses.

The full 64-CU top (64 + 32 + 1 caches, the 4 MB L2 included) is a large
model for a C++ simulator: Verilator's C++ for it took over ten minutes to
compile and the compiler then ran out of resources on a 16 GB machine. The
largest configuration simulated end to end is therefore the one above:
4 CUs, 2 instruction caches, full-size 16 KB and 32 KB L1s and a 64 KB L2.
The full 4 MB L2 is simulated on its own by `tb_gpu_l2_cache`, and the
96-port crossbar by `tb_req_arbiter`. To run the end-to-end test larger,
raise `N_CU` and `L2_BYTES` at the top of `tb_gpu_mem_system`; the access
pattern adapts to the L2's set count.

The end-to-end memory model answers loads after 300 cycles, so that enough
misses are in flight for the sets to fill with pending lines.
