# NDPage address translation for near-data processing cores

Near-data processing (NDP) puts small cores in the logic layer of a 3D-stacked
memory such as HBM2. These cores have only a small L1 cache and no large shared
last-level cache. Big-data workloads with irregular access patterns therefore miss in the TLB
very often. Each miss starts a page-table walk of four dependent memory reads on x86-64.
In a conventional core, most of those reads hit in the cache hierarchy. On an NDP
core they pollute the tiny L1 and still go to DRAM most of the time.

This RTL implements two changes to the memory-management unit of such a core:

1. **Metadata bypass.** The page-table walker never looks up or fills the L1
   data cache. Its page-table-entry (PTE) reads go straight to memory, through the same node
   memory port as ordinary cache misses, so the L1 holds only program data.
2. **Flattened PL2/PL1 level.** The two lowest levels of the x86-64 radix page table
   are merged into one 2 MB node that has 2^18 eight-byte entries. It is indexed by
   VA[29:12] as one 18-bit field. A walk then takes three dependent reads instead of
   four: PL4 at VA[47:39], PL3 at VA[38:30], then PL2/PL1 at VA[29:12].
   Each level has its own page walk cache (PWC).

Flattening is marked per node. Bit 9 of a PL3 entry says that the table it points
to is a flattened 2 MB node. A control-register bit, `cr3_flat_en`, switches the whole
mechanism on. If either bit is clear, the walker falls back to the ordinary
four-level walk, with PL2 at VA[29:21] and PL1 at VA[20:12]. So flattened and conventional tables can
be mixed in one address space.

Around the MMU sits enough of the rest of the chip to run it end to end:

- the two L1 caches;
- a per-node memory port;
- a 2D mesh that links the cores to the memory controllers.

## System organisation

```
          core fetch port                 core data port
               |                                |
        +------v------+                  +------v------+
        |  L1 ITLB    |                  |  L1 DTLB    |      mmu
        | 128e 4w 1cy |                  |  64e 4w 1cy |
        +------+------+                  +------+------+
               |   miss       +----------+      |  miss
               +------------->| L2 TLB   |<-----+
                              | 1536e    |
                              | 12 cycles|
                              +----+-----+
                                   | miss
                              +----v-----------------------+
                              | page table walker          |
                              |  L4 PWC  L3 PWC  L2/L1 PWC |
                              +----+-----------------------+
                                   | PTE line reads (never via L1)
 physical address                  |
 +------------+   +------------+   |
 | L1 I-cache |   | L1 D-cache |   |
 | 32KB 8w 4cy|   | 32KB 8w 4cy|   |
 +-----+------+   +-----+------+   |
       |  miss          |  miss /  |
       |                |  write   |
     +-v----------------v----------v--+
     | node memory port (3-way RR)    |   node_mem_arb
     +---------------+----------------+
                     |  request mesh / response mesh
             +-------v--------+
             | 2D mesh, XY    |  -> memory controller of the page's home node
             +----------------+
```

`ndp_top` builds `MESH_X*MESH_Y` such nodes; the default is 2×2, four cores. Each node
has one router on the request mesh and one on the response mesh. Each node also has one
memory-controller port (`mc_req_*`, `mc_rsp_*`), to which the HBM2 vault controller of
that node connects. The controllers and the DRAM are outside this RTL. The
testbenches replace them with a behavioural memory model.

## The page-table walk

`ptw.sv` is the centre of the design. A walk runs one level at a time. At each level
the walker looks in that level's PWC first, and reads memory only on a miss.

| level  | PTE address                           | PWC, key              | next |
|--------|---------------------------------------|-----------------------|------|
| PL4    | `cr3_base + VA[47:39]*8`              | L4 PWC, VA[47:39]     | PL3 |
| PL3    | `pl4.pfn*4096 + VA[38:30]*8`          | L3 PWC, VA[47:30]     | PL2/PL1 if flattened, else PL2 |
| PL2/PL1| `pl3.pfn*4096 + VA[29:12]*8`          | L2/L1 PWC, VA[47:12]  | leaf |
| PL2    | `pl3.pfn*4096 + VA[29:21]*8`          | none                  | PL1 (fallback only) |
| PL1    | `pl2.pfn*4096 + VA[20:12]*8`          | L2/L1 PWC, VA[47:12]  | leaf (fallback only) |

A flattened node must be 2 MB in size and 2 MB aligned in physical memory. Its
18-bit index covers the whole node. Each PWC key is the full VA prefix down to its
level. A PWC entry therefore names one PTE exactly, and the PWCs never have to be
invalidated when another table is replaced. After a change to CR3 or to the page
tables, the `flush` input clears all TLBs, PWCs and caches.

PTEs follow the x86-64 layout:

- bit 0: present;
- bit 1: writable;
- bits [33:12]: the physical frame number, limited by the 34-bit, 16 GB physical address.

A walk that reaches a PTE with the present bit clear ends with a fault. The hardware
does not handle page faults; that is left to software.

Latency of a walk, counting from the walker accepting a request, with `MEM_LAT` being the
round trip of one PTE read:

- each level read from memory costs `MEM_LAT + 3` cycles;
- each level that hits in a PWC costs 2 cycles;
- one more cycle delivers the result.

A flattened walk that misses everywhere therefore takes `3*(MEM_LAT+3)+1` cycles. A
conventional walk takes `4*(MEM_LAT+3)+1`. The memory read avoided is the main gain.

## Memory side of a node

`ndp_node.sv` serves two core ports: 0 for instruction fetch and 1 for data. An
access follows these steps:

1. The MMU translates the virtual address.
2. The node forms the physical address from the frame number and VA[11:0].
3. The node sends the access to the L1 of that port.
4. The response goes back to the core.

An access faults when the translation faults, or when it is a store to a page without the
writable bit. A faulting access never reaches the cache.

The node memory port (`node_mem_arb.sv`) arbitrates round-robin among three requesters:

- the L1 I-cache;
- the L1 D-cache;
- the page table walker.

Every request carries a 2-bit source tag, so responses find their way back.
The walker's path is the metadata bypass. It reaches memory without passing through any cache. The
`ev_meta_req` output pulses for each PTE read sent this way.

The L1 caches (`l1_cache.sv`) work as follows:

- Organisation: 32 KB, 8 ways, 64 B lines.
- Latency: a hit answers after 4 cycles. A miss costs 4 + 1 + `MEM_LAT` cycles.
- Replacement is round-robin.
- Stores write through and do not allocate on a miss. A store hit also updates the
  cached line. Memory is therefore always current, and PTEs written by software are seen by a walker
  that never reads the cache.
- An access with `req_nc` set is a non-cacheable load. It skips the tag lookup,
  takes 1 + `MEM_LAT` cycles and allocates nothing. This is how software reads PTE
  regions without pulling them into the L1.

## Interconnect

The interconnect is a mesh with 4-cycle hops, made of `mesh_router.sv` and `mesh_noc.sv`:

- Routing is XY: along X first, then along Y.
- Each input holds one flit. A flit leaves no earlier than `HOP_LAT` cycles after it
  arrived.
- Each output chooses among its inputs round-robin.

A packet is one flit, which carries a full 64 B line plus its header. The request flit
is 616 bits wide: tag, source, write flag, address, data and byte strobes. The
response flit is 517 bits wide.

There are two separate meshes, one for requests and one for responses. A response
can then never wait behind a request, which rules out protocol deadlock.

Physical memory is interleaved over the nodes' memory controllers at 4 KB
granularity. The home node of an address is `(PA >> 12) % NUM`. A page therefore lives
entirely in one vault.

## Parameters

| module | parameter | default | origin |
|---|---|---|---|
| `mmu` | `ITLB_SETS`×`ITLB_WAYS` | 32×4 (128 entries) | evaluated system |
| `mmu` | `DTLB_SETS`×`DTLB_WAYS` | 16×4 (64 entries) | evaluated system |
| `mmu` | `L1TLB_LAT`, `L2TLB_LAT` | 1, 12 | evaluated system |
| `mmu` | `L2TLB_SETS`×`L2TLB_WAYS` | 128×12 (1536 entries) | entry count from the evaluated system; the 12-way split is a choice |
| `ptw` | `PWC4/PWC3/PWC21_ENTRIES` | 16/16/32 | choice |
| `l1_cache` | `SIZE_B`, `WAYS`, `HIT_LAT` | 32768, 8, 4 | evaluated system |
| `mesh_*` | `HOP_LAT` | 4 | evaluated system |
| `ndp_top` | `MESH_X`, `MESH_Y` | 2, 2 | 4 cores, the main configuration; 1×1 and 4×2 elaborate too |

The shared widths are in `ndp_pkg.sv`: 48-bit virtual addresses, 34-bit physical
addresses, 4 KB pages, 64 B lines and 3-bit node numbers (at most 8 nodes).

## Departures and own choices

These points follow the evaluated design in substance but are not specified by it:

- All replacement policies, all PWC sizes, the associativity of the L2 TLB, and the
  position of the flattened bit (bit 9, one of the bits x86 leaves to software).
- The write-through, no-write-allocate L1, and the non-cacheable load path.
- The walker's cycle costs. Every memory access is blocking, one per port.
- The mesh routers, the two-network split, the 4 KB interleaving and the packet
  format.

Things deliberately left out:

- **Coherence.** The L1s of different cores are not kept coherent. Write-through keeps memory current, but
  a line cached by one core goes stale when another core writes it.
- **Link width.** A mesh link carries one whole flit per hop. That is 512 data bits plus header
  wires, so it is wider than a bare 512-bit link, and a line is not split into flits.
- **Page sizes.** There are only 4 KB pages, with no 2 MB or 1 GB leaf entries in the walker.
- **Parallelism.** There are no concurrent walks or hit-under-miss. The MMU handles one miss
  at a time and alternates fairly between its two ports.
- **Region marking.** No address-range table marks PTE regions in hardware. The
  requester decides whether an access bypasses the cache: the walker's reads always do, and
  software gets the same effect with a non-cacheable load. Page-table pages are 4 KB and
  line aligned, so a bypassed line never shares a cache line with ordinary data.
- **Core, controllers and DRAM.** The x86 core, the HBM2 controllers and the DRAM itself are not
  included. Their connections are ports of `ndp_top`.
- **Operating system.** The work of allocating 2 MB flattened nodes and setting the
  flattened bit is software. The testbench memory model performs that work.

## Sizing against the evaluated workloads

The physical address is 34 bits wide, so the design addresses 16 GB, the capacity of the evaluated HBM2
stack. The evaluated graph workloads use 8 GB, XSBench 9 GB, GUPS 10 GB and DLRM 10 GB, so they fit. Their
flattened page tables need about 2 MB per GB mapped, which is 16 to 20 MB. The
33 GB genomics data set does not fit in 16 GB of physical memory. Running it requires the operating
system to swap.

TLB reach is 1536 × 4 KB = 6 MB in the L2 TLB. For data sets of many gigabytes, almost every
random access is a TLB miss. That is the case the design targets.

One run of `tb_ndp_workloads` at the default configuration (20-cycle memory)
gives an idea of the effect. L4 and L3 entries almost always hit in their PWCs, so what
remains is the leaf access. The flattened layout reads one PTE line per walk. The conventional layout
reads two, because the PL2 level has no PWC of its own:

| pattern | tables | cycles | PTE reads per walk |
|---|---|---|---|
| random access | flattened | 16304 | 1.04 |
| random access | conventional | 21777 | 2.04 |
| pointer chasing | flattened | 18102 | 1.03 |
| pointer chasing | conventional | 26590 | 2.03 |

## Verification

Each testbench in `tb/` checks its block against an independent model. It prints
`TB_RESULT checks=<n> failures=<m>` and stops itself with a watchdog.

| testbench | block | what it checks |
|---|---|---|
| `tb_l1_dtlb`, `tb_l1_itlb`, `tb_l2_tlb` | `tlb_sa` at the three sizes | hit/miss against a reference model, replacement, refill of an existing entry, flush, exact 1- and 12-cycle latency |
| `tb_l4_pwc`, `tb_l3_pwc`, `tb_l21_pwc` | `pwc` | hits, capacity, round-robin eviction, flush |
| `tb_ptw` | `ptw` | flattened and conventional walks on page tables built in memory, PWC reuse, faults, exact walk latency, number of reads per walk, PTE addresses |
| `tb_l1d_cache`, `tb_l1i_cache` | `l1_cache` | random loads and stores against a memory model, 4-cycle hit latency, miss latency, non-cacheable loads not allocating, write-through |
| `tb_node_mem_arb` | `node_mem_arb` | fairness, holding a request until accepted, response routing by tag |
| `tb_mmu` | `mmu` | L1 TLB hit, L2 TLB hit after 14 cycles, walks, faults, both ports at once |
| `tb_ndp_node` | `ndp_node` | loads and stores through translation and cache, write-protection faults, bypass counts |
| `tb_mesh_router`, `tb_mesh_noc` | mesh | every packet delivered once to the right node, XY path, per-hop latency |
| `tb_ndp_top` | `ndp_top` | four cores running random loads and stores over flattened and conventional page tables, at the default parameters |
| `tb_ndp_workloads` | `ndp_top` | the two access patterns of the target workloads, scaled down: random read-modify-write over 256 pages spread across 4 GB per core (GUPS-like), and pointer chasing through 160 pages (graph-like). Each pattern runs once on flattened and once on conventional tables; the testbench checks data, walk shape, and that the flattened run is faster |

`tb_ndp_top` counts each mechanism and fails if one never occurs. The mechanisms are:

- L1 TLB misses, L2 TLB hits and completed walks;
- walks with three memory reads, and walks with four, which only the conventional fallback can produce;
- PWC hits and bypassed PTE reads;
- L1 hits and misses;
- faults;
- requests to remote memory controllers.

`tb/hbm_model.sv` is the behavioural memory. It is a sparse array of 64-bit words with a fixed
latency. It has helper functions that allocate frames and build both kinds of page table.

To simulate one block, for example the walker:

```
verilator --binary --timing -Wno-fatal --top-module tb_ptw \
    rtl/ndp_pkg.sv rtl/pwc.sv rtl/ptw.sv tb/hbm_model.sv tb/tb_ptw.sv
./obj_dir/Vtb_ptw
```

For the whole system, list `rtl/ndp_pkg.sv` first, then the other files in `rtl/`,
then `tb/hbm_model.sv` and `tb/tb_ndp_top.sv`. Building takes about a minute. The run
takes well under a second.
