# HALCONE memory system in SystemVerilog

Several GPUs that share one physical memory need their caches kept coherent.
Directory or snooping protocols would flood the network with invalidations,
given how many requests thousands of GPU threads issue. HALCONE avoids
invalidations. Each cached block carries a **lease**: a range of logical time
during which the copy may be read. Each cache has its own logical clock.
A copy whose lease has run out, measured by that clock, is simply not used
again. Writes push the writer's clock forward, and that is how stale copies
come to be ignored. The memory side remembers how far it has promised each
block. It does this in a small **timestamp storage unit (TSU)** next to each
memory controller, so the GPUs never have to talk to each other.

This RTL models the memory hierarchy of such a shared-memory multi-GPU
system: the private L1 caches, the banked L2 of every GPU, the L2-to-memory
switch, and the memory controllers with their TSUs. It does not model the
compute units or the DRAM. Their signals are ports of the top module, and
the testbenches use a behavioural DRAM.

## System structure

```
 CU ──► L1 ──┐                                  ┌─► MMC ─┬─► TSU
 CU ──► L1 ──┼─ XBar ─► L2 bank ─┐   network    │        └─► DRAM port
   ...       │  (per GPU)  ...   ├─ crossbar ───┼─► MMC ...
 CU ──► L1 ──┘                   │ (both ways)  │
            GPU 0 … GPU 3 ───────┘              └─ 32 memory modules
```

Default size (`halcone_top` parameters):

| parameter | default | meaning |
|---|---|---|
| `N_GPU` | 4 | GPUs |
| `N_CU` | 32 | CUs (and L1s) per GPU |
| `N_L2` | 8 | L2 banks per GPU |
| `N_MEM` | 32 | memory modules (8 HBM stacks of 512 MB per GPU, 16 GB in all) |
| `L1_SETS`, `L1_WAYS` | 64, 4 | 16 KB L1 with 64-byte blocks |
| `L2_SETS`, `L2_WAYS` | 256, 16 | 256 KB per L2 bank |
| `TSU_SETS`, `TSU_WAYS` | 512, 8 | 4096 timestamp entries per memory module |
| `TSU_LATENCY` | 50 | TSU access cycles |
| `RD_LEASE`, `WR_LEASE` | 10, 5 | lease lengths in logical time units |

Addresses are 34-bit byte addresses. A CU reads or writes one 32-bit word.
A block is 64 bytes, or 16 words.

- The memory module of a block is chosen by 4 KB pages, interleaved over all
  modules: `(block >> 6) % N_MEM`.
- The L2 bank within a GPU is chosen by the low block-address bits:
  `block % N_L2`.
- The memory controller strips the module-select bits before its TSU
  lookup.

## Logical time

Timestamps in blocks and in the TSU are 16 bits wide. The clock register
`cts` of each cache is 64 bits wide, but it only ever takes values of 16-bit
timestamps.

A cached block holds a lease `[wts, rts]`. An access to a block is a hit
only when the tag matches **and** `cts <= rts`. Otherwise it is a miss, of
one of two kinds:

- A **compulsory miss**: there is no matching tag.
- A **coherency miss**: the tag matches, but the lease has expired.

Both kinds of miss fetch the block again, together with a fresh lease.

When a response `{block, rts, wts}` arrives from the level below, the cache
computes:

```
Bwts = max(cts, wts)
Brts = max(wts + 1, rts)
cts  = max(cts, Bwts)
```

It stores `Bwts` and `Brts` with the block and passes them upward. The
clock therefore moves only when a response carries a later `wts`. A write
always produces a later `wts`, so a writer's clock moves past every lease
that was given out before its write. From then on, the writer's own stale
copies miss.

Writes go through to memory at both levels. On a lease hit, the word is
written into the cached block at once, and the block stays locked until the
new lease comes back. On a miss, the block returned from below, which
already contains the write, is allocated.

## The TSU

The TSU is an 8-way set-associative table of `memts` values, one per block.
`memts` is the latest logical time up to which memory has promised that
block. It holds no data. For each request it does the following:

| request | update | answer |
|---|---|---|
| read | `memts += RdLease` | `rts = memts`, `wts = memts - RdLease` |
| write | `memts += WrLease` | `wts = old memts + 1`, `rts = memts` |
| L2 eviction notice with the victim's `rts` | drop the entry if `memts <= rts`, else keep it | none |

A block with no entry starts from `memts = 0`. When a set is full, the entry
with the lowest `memts` gives way. If adding a lease would go beyond 16
bits, the entry restarts from 0.

Every read or write goes to the TSU and to the DRAM in the same cycle.
`halcone_mmc` replies when both have answered. The TSU takes 50 cycles and
the DRAM model 100, so an access costs the DRAM latency plus one issue cycle
(101 cycles).

A worked example, with RdLease 10 and WrLease 5 and X and Y in one L2 bank:

1. Two CUs read X and Y. Both get the lease `[0, 10]`.
2. One CU writes Y and gets `[11, 15]`. The other writes X and also gets
   `[11, 15]`. Both L1 clocks are now 11.
3. Each L1's old copy of the other variable expired at 10. So the next read
   of X or Y misses, and it returns the new value (3 and 5 in the
   testbenches).

## Caches (`halcone_l1`, `halcone_l2`)

Both caches are blocking. They accept one request, and keep it as the only
outstanding miss until it completes. That single miss entry also acts as the
lock on a block being written. Replacement is LRU, using a last-use stamp
per line, and empty ways are filled first.

- **Valid bits** are one flat register that is cleared on reset.
- **Tags, timestamps, data and LRU stamps** are not reset. They are written
  in a separate clocked process, so synthesis keeps them as RAMs.
- **L1.** A read hit answers 2 cycles after the request is presented. A miss
  or a write sends one request to L2. The CU gets its answer in the cycle the
  L2 response arrives. The answer to a write is the word written.
- **L2.** Before an L2 replaces a valid block, it sends an eviction notice
  `{address, rts}` to that block's memory module. The requested access
  follows the notice. The set index skips the bank-select bits.
- **Overflow.** If `Bwts` or `Brts` does not fit in 16 bits, the cache
  resets `cts` to 0 and leaves the block invalid, so only that block misses
  later. An L2 in this case passes `{rts 0, wts 0}` upward.

## Interconnect (`halcone_xbar`)

`halcone_xbar` is one generic crossbar. It has no buffers, and each output
has a round-robin arbiter. It passes one message per output per cycle, with
valid/ready handshakes on both sides. The design uses it four times:

- within each GPU, L1s to L2 banks and back;
- between all L2 banks and all memory modules, in both directions.

Link widths and bandwidths are not modelled: a whole message, including a
64-byte block, moves in one cycle.

## Modules

| file | role |
|---|---|
| `rtl/halcone_pkg.sv` | widths, message structs, event structs, address mapping functions |
| `rtl/halcone_l1.sv` | L1 vector cache of one CU |
| `rtl/halcone_l2.sv` | one L2 bank with its controller |
| `rtl/halcone_xbar.sv` | round-robin crossbar |
| `rtl/halcone_tsu.sv` | timestamp storage unit |
| `rtl/halcone_mmc.sv` | memory controller: TSU + DRAM port, joins the answers |
| `rtl/halcone_gpu.sv` | one GPU: L1s, crossbars, L2 banks |
| `rtl/halcone_top.sv` | GPUs, network crossbars, memory controllers |
| `tb/halcone_dram_model.sv` | behavioural DRAM, 100-cycle latency; an unwritten word reads as its word address |

The top's ports are per-CU request/response arrays, indexed `gpu * N_CU + cu`,
and per-module DRAM request/response arrays. It also has observation outputs:
every cache's `cts`, and per-cycle event pulses for hits, both kinds of miss,
evictions, overflows and TSU actions.

## Where this departs from, or fills in, the source description

- **Write timestamps.** The published algorithm for the TSU write path would
  give a write the same `wts` as the end of the last read lease. The
  published example timeline gives `old memts + 1` instead, and the example
  is what is built here.
- **Clock on reads.** A cache clock also advances on read fills. The
  algorithm listing advances it only on writes, but the prose and example do
  it on both.
- **Hit test.** One figure writes the hit test as `cts < rts`, and the
  algorithms use `cts <= rts`. The algorithms are followed.
- **Lease values.** Lease values are given once as (Rd 10, Wr 5) and once as
  (5, 10). The first is used, since the text also says that the write lease
  is the shorter one.
- **Memory size.** Memory is 32 modules of 512 MB, following the
  configuration table. A 4 GB per-stack figure appears in an illustrative
  paragraph only.
- **TSU eviction test.** The "shared" test on eviction ("memts within one
  lease") is implemented as `memts > rts of the evicted copy`.
- **Own choices.**
  - TSU depth (4096 entries per module, enough for every L2 block in the
    system).
  - Blocking caches.
  - The L2 bank mapping.
  - Message formats.
  - One request in flight per memory controller.
  - L1 lines store no `wts`, since nothing reads it.
- **Banked L2 clocks.** L2 banks of one GPU keep separate clocks, and an L1
  sends no clock with its requests. An L1 that is ahead of the bank serving a
  block can therefore get a copy whose lease has already run out at the
  L1's own time. It uses that copy for the one access that asked for it, and
  misses on it afterwards. For example, X and Y live in different banks. A
  CU writes Y, and its L1 clock jumps ahead. It then reads X from a bank
  whose clock never moved, and it can get X's old value. The testbenches put
  the worked examples into a single bank, where the behaviour matches the
  description. Anything relying on ordering across banks should be checked
  with this in mind.

## Simulation

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself with
a watchdog. With verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_halcone_top \
  rtl/halcone_pkg.sv rtl/halcone_xbar.sv rtl/halcone_tsu.sv rtl/halcone_mmc.sv \
  rtl/halcone_l1.sv rtl/halcone_l2.sv rtl/halcone_gpu.sv rtl/halcone_top.sv \
  tb/halcone_dram_model.sv tb/tb_halcone_top.sv
./obj_dir/Vtb_halcone_top
```

| testbench | what it covers |
|---|---|
| `tb_halcone_xbar` | random traffic against a reference round-robin arbiter |
| `tb_halcone_tsu` | every TSU rule, set-full eviction, sharing test, memts overflow, 50-cycle latency |
| `tb_halcone_mmc` | routing of answers, data with writes merged, leases, 101-cycle latency, silent eviction, back-pressure |
| `tb_halcone_l1` | hits, both miss kinds, write-through, clock update, LRU, overflow |
| `tb_halcone_l2` | as L1, plus eviction notices to the right module and `Brts = wts+1` |
| `tb_halcone_top` | reduced system (2 GPUs × 2 CUs): the intra- and inter-GPU examples, lease ordering, random shared/private traffic, overflow; fails if any hit, miss, eviction or TSU action never occurs |
| `tb_halcone_top_full` | the default-size system (128 CUs, 32 banks, 32 modules) running the inter-GPU example; about two minutes with verilator |

In the random phase, a word private to one CU must read back that CU's last
write. A shared word may read any value ever written to it, because leases
allow reads of older values.
