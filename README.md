# SPARTA: split, partitioned address translation for accelerators — RTL

Accelerators that share virtual memory with the CPU need address translation,
but a TLB with enough reach to cover hundreds of gigabytes is too large for a
small accelerator. Even a hit-rich TLB helps little on a cache miss: the
access must still cross the network to some memory channel, and a TLB miss
adds a page walk that crosses the network again to a page-table entry that may
live anywhere.

SPARTA splits translation in two. The operating system guarantees that every
virtual page is placed in one particular **memory partition** (a socket, a
channel, or a finer slice), chosen by a simple hash of the virtual page number.
It is free to place the page in any frame of that partition. Then:

* the accelerator does not translate at all. It computes the hash, which is a few
  address bits, and sends the request, still virtual, to that partition;
* next to each memory controller a small **memory-side TLB** translates only
  addresses of that partition. It is shared by every accelerator that touches the
  partition, so shared data is never cached as several TLB entries in several
  places;
* each partition keeps its **own page table, in its own DRAM**, covering only its
  own frames. A TLB miss is therefore resolved by one local DRAM read and never
  crosses the network.

The trip across the network now serves translation and data fetch at once. A
memory-side TLB hit costs one probe before the DRAM access. A miss costs one
local DRAM read more. Neither adds a network round trip.

This repository holds synthesizable SystemVerilog for the memory-side hardware
and the accelerator's miss path. It is built in the main configuration
evaluated for SPARTA:

* 128 GB of memory in 32 partitions, one per memory channel (8 sockets × 4 channels);
* 4 KB pages;
* 128-entry, 4-way memory-side TLBs;
* a 16 KB, 4-way virtual cache in each accelerator, with no TLB on the accelerator side.

## Address map and the partition rule

| quantity | value | where it is set |
|---|---|---|
| virtual address | 48 bits, page number VPN = VA[47:12] | `sparta_pkg::VA_W` |
| partition of a virtual page | VPN mod 32 = VA[16:12] | `partition_hash` |
| physical address | 37 bits = {partition[4:0], local address[31:0]} | `sparta_pkg::PA_W`, `LPA_W` |
| partition *p* owns | [p·4 GB, (p+1)·4 GB) | |
| local frame number (LFN) | local address[31:12], 20 bits | `LFN_W` |
| `vpn_hi` | VPN[35:5], the VPN without its 5 partition bits | `VPNH_W` |

The only constraint on the OS is this: a virtual page with VPN *v* must be
given a frame in partition *v* mod 32. Within the partition any of the 2^20
frames may be used.

For example, take 4 partitions and hash VPN mod 4. A region V3…V7 then lands
in partitions 3,0,1,2,3. A second process that shares those frames must be
given a virtual range with the same partition sequence (V7…V11, say). It
cannot simply take the next free range. This restriction lives entirely in the
OS allocator; the hardware relies on it and never checks it.

Because `vpn_hi` is what the memory side sees, the TLB and page table store
`vpn_hi`. The partition bits are implied by the partition that received the
request.

## Inverted page table format

Each partition's page table is a hashed (inverted) table in the style of
hashed page tables. It maps (address-space id, `vpn_hi`) to a local frame.
The memory side reads it and never writes it. The host OS builds and updates
it with ordinary 64-bit physical stores through the host port.

* Placement: local addresses `0xFE00_0000` to `0xFFFF_FFFF` of every partition
  (32 MB, `IPT_BASE`). Data frames must be allocated below it.
* Size: four entries per frame (load factor 1/4): 2^22 entries in 2^19 buckets.
* Bucket: one 64-byte line holding 8 entries. One walk reads one bucket, which is
  one DRAM access, and compares all 8 entries in parallel.
* Bucket index: `h = vpn_hi[18:0] ^ (asid << 11) ^ vpn_hi[30:19]` (19 bits).
  Bucket address = `IPT_BASE + 64*h`.
* Entry (64 bits, any slot of the bucket):

| bits | field |
|---|---|
| 63 | valid |
| 62 | writable |
| 61:54 | asid |
| 53:23 | vpn_hi |
| 22:20 | reserved, write 0 |
| 19:0 | local frame number |

If the key is not in its bucket, the access ends with a page fault. There is no
overflow chain, so the OS must keep at most 8 live entries per bucket. With a
1/4 load factor that is rarely a limit. To unmap a page, the OS clears the
valid bit.

## What happens on an access

From the accelerator core:

1. **Virtual cache** (`vcache`). The lookup uses the virtual address and the
   address-space id. A load hit answers on the next clock. A miss, and every
   store (write-through), leaves as a virtual request.
2. **Partition hash** (`partition_hash`). VA[16:12] picks the destination
   partition.
3. **Network** (`noc_xbar`). The request travels to that partition. Each
   partition input has a round-robin arbiter; requesters that lose wait.
4. **Memory-side unit** (`partition_mmu`). It proceeds as follows:
   * A multiplexer separates physical requests from virtual ones. Physical
     requests come from the host, or from legacy devices behind an IOMMU, and go
     straight to memory.
   * A virtual request probes the TLB for one cycle.
   * On a TLB hit, the DRAM access starts at once.
   * On a TLB miss, `ipt_walker` reads the bucket from the partition's own DRAM.
     The entry is written into the TLB and the TLB is probed again. Then comes
     the data access.
   * A write to a read-only page returns a *protection fault*, for example to
     trigger copy-on-write. No matching entry returns a *page fault*. Neither
     touches data memory.
5. The response carries the line, the local frame number that was used, and a
   status. It returns over the network to the requester named in the request.

Cycle counts inside the memory-side unit (D = cycles from the memory
controller accepting a request to its response):

| case | from request accepted to response valid |
|---|---|
| physical access | D + 3 |
| virtual, TLB hit | D + 4 |
| virtual, TLB miss | 2D + 9 |

The TLB-hit and TLB-miss sequences follow the event order of SPARTA's
timeline: probe → data DRAM for a hit; probe → table DRAM → probe → data DRAM
for a miss. The network adds nothing to a miss.

## Modules

| file | role |
|---|---|
| `rtl/sparta_pkg.sv` | widths, `mreq_t`/`mresp_t` (network), `dreq_t` (memory), `pte_t`, `status_e`, the bucket hash |
| `rtl/partition_hash.sv` | VA → partition (combinational) |
| `rtl/vcache.sv` | 16 KB 4-way virtually tagged cache, 64 B lines, ASID in the tag |
| `rtl/noc_xbar.sv`, `rtl/rr_arbiter.sv` | requester ↔ partition crossbar, round-robin per output |
| `rtl/mem_tlb.sv` | 128-entry 4-way memory-side TLB, combinational lookup, fill port |
| `rtl/ipt_walker.sv` | one-read walk of the partition's hashed page table |
| `rtl/partition_mmu.sv` | per-partition virtual/physical mux, TLB, walker and DRAM sequencing |
| `rtl/sparta_top.sv` | 8 accelerators' caches and hashes, host port, network, 32 partition units |
| `tb/dram_model.sv` | behavioural memory controller + DRAM for one partition (testbench only) |

`sparta_top` ports:

* per accelerator, a load/store port. The request uses valid/ready; the response
  is a one-cycle pulse carrying 64-bit data and a status;
* a host port taking physical addresses, with valid/ready in both directions;
* per partition, a memory-controller port. The request (`dreq_t`) uses
  valid/ready: a read returns the 64-byte line, a write stores one 64-bit word.
  Every request gets exactly one `dram_resp_valid`;
* event pulses: cache hit/miss, TLB hit/miss, page fault, and network contention.

All handshakes transfer on a rising edge where valid and ready are both high.
Reset is active-low and asynchronous, and clears every valid bit. Each
memory-side unit serves one request at a time.

## Choices made here that SPARTA leaves open

The partition count, memory size, page size, TLB size and associativity, cache
size and associativity, the per-partition page table, the single-access walk
(1/4 load factor), the valid bit per entry, and the virtual/physical
multiplexer all follow SPARTA's description. The following are this
implementation's own:

* a 48-bit virtual address and an 8-bit address-space id in the TLB, the page
  table and the cache tags. Without the id, processes could not share a TLB;
* the bucket organisation (8 entries per line), the hash, the entry layout, and
  the table's placement;
* TLB indexing by `vpn_hi`, with invalid-way-first and then round-robin
  replacement;
* a blocking memory-side unit with a one-cycle TLB probe, and a TLB re-probe
  after each fill;
* a blocking, write-through, no-write-allocate virtual cache with 64-byte
  lines;
* the network as a single-cycle crossbar. The real network's topology and
  latency are not modelled; a pipelined network can replace it behind the same
  valid/ready ports;
* 8 accelerators (one per socket) plus one host port.

## Not included

* **Memory controllers and DRAM.** They sit outside `sparta_top`, on the
  `dram_*` ports. `tb/dram_model.sv` is a fixed-latency stand-in.
* **The accelerators' compute, the host cores, LLC, DMA and the IOMMU.** The host
  and IOMMU traffic enters through the host port.
* **The OS side.** This covers frame allocation by partition, the virtual-range
  adjustment for shared and remapped pages, and page-table maintenance.
  TLB invalidation (shootdown) is not specified by SPARTA and is not
  implemented. A changed or removed mapping stays in the memory-side TLB until
  it is evicted or the unit is reset.
* **Cache coherence between accelerators' virtual caches.** It is not
  specified; the caches are write-through but never invalidated by others'
  stores.
* **Other configurations SPARTA was evaluated in.** These are 4, 8 and 128
  partitions, 2 MB pages, and physical accelerator caches with a small
  accelerator-side TLB. The partition layout is a set of package constants.
  Fewer than 32 partitions would also need a wider page-table entry, because
  `vpn_hi` and the frame number both grow and 64 bits no longer hold them with an
  8-bit id. More partitions would mean re-deriving `LPA_W`, the table placement
  and the hash. 2 MB pages would need a second page size in the TLB and table. For the physical-cache
  option, every response already returns the frame number, which such a TLB
  would be filled with.

## Simulating

Every testbench is self-checking and prints `TB_RESULT checks=N failures=M`.
With Verilator 5:

```
verilator --binary --timing --assert --top-module tb_sparta_top \
  rtl/sparta_pkg.sv rtl/*.sv tb/dram_model.sv tb/tb_sparta_top.sv
./obj_dir/Vtb_sparta_top
```

Substitute any testbench below for `tb_sparta_top`. Pass
`+verilator+rand+reset+2` to start uninitialised state at random values.

| testbench | what it covers |
|---|---|
| `tb_partition_hash` | VPN mod 32 and mod 4 against random addresses, and the 4-partition example above |
| `tb_mem_tlb` | fill and lookup of all 128 entries, ASID isolation, eviction order, overwrite, reset |
| `tb_ipt_walker` | bucket address, a single read per walk, all 8 slots, valid and ASID checks, result timing |
| `tb_partition_mmu` | page table written physically; miss, walk, fill, then hit; D+3, D+4 and 2D+9 latencies; stores; both fault kinds |
| `tb_noc_xbar` | 3×4 crossbar with random stalls; every request and response delivered exactly once to the right place |
| `tb_vcache` | hit latency, eviction, write-through, no write allocate, faults not cached, 3000 random accesses |
| `tb_sparta_top` | the full design at its default size (see below) |
| `tb_index_workloads` | index-traversal lookups on the full design (see below) |

`tb_sparta_top` runs the full design at its default size: 8 accelerators and 32
partitions. The test has three phases:

1. An "OS" builds 768 mappings for 4 processes through the host port.
2. All 8 accelerators run 400 random accesses each at once, and every result is
   checked against a reference memory.
3. The host reads back stored words physically.

The test requires every mechanism to occur at least once: cache hits and misses,
TLB hits and walks, page faults, protection faults, physical bypass, and network
contention. It runs in under a second.

`tb_index_workloads` runs the index-traversal kind of workload SPARTA targets,
scaled down from 128 GB to a simulable size. Four processes each build one
structure in their own 8 MB heap, with every node on a random line:

* an internal binary search tree;
* an external binary search tree;
* a chained hash table;
* a 4-level skip list.

The two accelerators of each process then run lookups at the same time as all
the others. Together the heaps are 32 MB, twice the 16 MB that the 32
memory-side TLBs can cover, so lookups really miss in the caches and the TLBs.
Every load and every lookup result is checked. The test prints the
memory-side TLB miss ratio and the mean cycles per lookup. It takes about 40
seconds.
