# A tagged-memory metadata system for hardware optimizations

Many hardware optimizations work better when software tells the hardware what
it is doing. A prefetcher that knows where a graph's edge list starts can
follow pointers no pattern detector would find. A bounds checker that knows
which array an access is meant for can catch an overflow. Building a special
channel for each such technique is expensive. This design is one shared channel:

- software attaches small **tag IDs** to regions of memory;
- it attaches **metadata** to each tag, per hardware technique;
- hardware "clients" ask, for any address, *which tag does this address carry?*
  and act on the metadata of that tag.

Two clients are included: a graph prefetcher, and a memory-safety checker that
does bounds checking and return-address protection.

## Tagged memory

Physical memory is divided into **granules** of 512 bytes (`GRAN_LOG2 = 9`).
Every granule carries an 8-bit tag ID, and tag 0 means "untagged". The tags
live in memory, in the **Metadata Mapping Table (MMT)**:

- one byte per granule, at `mmt_base + (paddr >> 9)`;
- 1/512 of physical memory, i.e. 16 MiB for 8 GiB;
- the OS allocates it and sets `mmt_base` with SETMMT.

Because the table is indexed by *physical* address, every virtual address is
translated first, both when tags are written (MAP) and when they are looked up.

The **Metadata Mapping Cache (MMC)** keeps recently used granule → tag mappings:

- 128 entries, each a 30-bit granule number plus an 8-bit tag (38 bits);
- fully associative, with not-most-recently-used replacement;
- the physical address width is 39 bits, so that a granule number is exactly the
  30-bit MMC key;
- 128 granules of 512 B means the MMC covers 64 KiB of tagged memory at a time.

Each client has its own **Private Metadata Table (PMT)**:

- 256 entries (one per tag ID) of 64 bytes each, 16 KiB per client;
- what the 64 bytes mean is up to the client.

## The instructions

The core hands the hardware one instruction at a time on a valid/ready port
(`cmd_valid`, `cmd_ready`, `cmd`). `cmd.funct` selects the operation; `rs1` and
`rs2` are the two source registers of a RISC-V custom instruction.

| funct | operation | rs1 | rs2 |
|---|---|---|---|
| 0 | CREATE | `[7:0]` TagID, `[15:8]` ClientID | virtual address of 64 B of metadata |
| 1 | MAP | start (virtual) | `[7:0]` TagID, `[63:8]` size in bytes |
| 2 | MAP2D | start | `[7:0]` TagID, shape from MAPARGS |
| 3 | MAP3D | start | `[7:0]` TagID, shape from MAPARGS |
| 4 | UNMAP | start | size in bytes |
| 5 | MAPARGS | `{lenY[31:0], lenX[31:0]}` | `{sizeZ[15:0], sizeY[15:0], sizeX[31:0]}` |
| 6 | SETMMT | physical base of the MMT | – |
| 7 | FLUSH | – | – |
| 8 | UNMAP2D | start | shape from MAPARGS |
| 9 | UNMAP3D | start | shape from MAPARGS |

**MAP and UNMAP.** MAP tags every granule that overlaps `[start, start+size)`.
UNMAP writes tag 0 to the same granules. The walk goes one granule at a time:

1. translate the granule's address, once per 4 KiB page;
2. write the granule's MMT byte (a byte-masked write of one memory word);
3. if the MMC holds that granule, update its entry in place.

Because of step 3 a lookup never sees a stale tag.

**MAP2D and MAP3D.** These tag sub-arrays of a row-major array:

- `sizeY` rows of `sizeX` bytes, starting `lenX` bytes apart;
- for 3D, `sizeZ` such planes, starting `lenX*lenY` bytes apart.

A custom instruction only carries two registers, so MAPARGS stages the shape
beforehand. UNMAP2D and UNMAP3D clear the same shapes.

**CREATE.** CREATE translates the metadata pointer and reads the 64 B block as 8
words. It then writes PMT entry `TagID` of client `ClientID`.

**FLUSH.** FLUSH invalidates all PMT entries and the whole MMC, as an OS does on
a context switch.

`busy` stays high while an instruction runs. A translation fault aborts the
instruction and pulses `fault`.

Software is expected to issue CREATE/MAP right before the load or store they
concern and to wait for `busy` to fall. Binding them to the next load/store in
program order is the core's job; the core is outside this design.

## The lookup path

`lookup_unit` serves the clients round robin, one lookup at a time:

```
client request (vaddr, mode)
   |
   v
TLB port  -- fault --> response: dropped, fault
   |
   v
MMC probe (granule number) -- hit --> response: tag
   |
   | miss:
   |   best-effort mode --> response: dropped
   v
MMT byte read from memory --> fill MMC --> response: tag
```

**Modes.** A lookup carries one of three modes:

- **force stall**: the instruction that triggered the lookup must wait for the result;
- **no stall**: the core carries on, but the lookup is always resolved;
- **best effort**: the lookup may be dropped, and here it is dropped exactly when
  it misses in the MMC.

Whether the core actually waits is up to the client. The safety client stalls the
core; the prefetcher never does.

**Latency.** The response is a one-cycle pulse.

- A physical-address lookup that hits: 3 cycles after the request handshake.
- A virtual-address lookup adds the TLB round trip.
- An MMC miss adds one memory read.

## Graph prefetcher (client 0)

Graph programs in the vertex-centric style chase indices through four arrays:

1. the **work list** names a vertex;
2. the **vertex list** at that vertex gives an offset into the **edge list**;
3. the edge list gives a neighbour;
4. the neighbour indexes the **property list**.

A stride prefetcher cannot predict these addresses. This one reads them. Software
tags each array with its own tag ID, and describes each array with a CREATE for
client 0. The PMT entry holds these fields:

| bits | field |
|---|---|
| `[63:0]` | base address of the array this one indexes (0: none) |
| `[127:64]` | base address of this array |
| `[135:128]` | log2 of this array's element size (0…3) |
| `[143:136]` | log2 of the next array's element size |
| `[144]` | range flag: this array's element and the next one bound a range of indices into the next array |
| `[191:160]` | size of this array in bytes |
| `[197:192]` | prefetch stride, in elements |

For every memory access of the core (`core_valid && core_ready`):

1. Look up the address's tag (no-stall mode by default; `pf_mode` selects the mode).
2. Read that tag's PMT entry. Stop if the entry is invalid, or if the address is
   outside `[base, base+size)`. A granule can be tagged beyond the end of a
   small array, so the size check matters.
3. At the first level, the target is the element `stride` elements ahead, if
   that element is still inside the array. At later levels, the target is the
   computed element itself. Translate the target
   and read it from memory. That read is the prefetch, and is also shown on
   `pf_valid`/`pf_addr`.
4. Take the element's value as an index: the next address is
   `next_base + value << log2(next element size)`. Repeat from step 1 with it.
   The chain ends when an array has no next array, or after `PF_DEPTH` (4)
   levels.

**Range walk.** A CSR vertex list does not name one edge. It names a range:
vertex `v` owns edges `vl[v]` up to, but not including, `vl[v+1]`. If the vertex
list's entry has the range flag, the prefetcher works as follows:

1. it reads both bounds;
2. for each edge index in the range, at most `MAX_RANGE` (8) of them, it follows
   the chain below: the edge, then that neighbour's property.

The upper bound usually sits in the same memory word. If not, one extra word is
read. A pair of bounds that straddles a page is treated as a single index. Only
one range is expanded per chain.

A trigger that arrives while a chain is being followed is dropped and counted.
Prefetched data is only read, not placed in a cache; that belongs to the core's
memory system.

## Safety client (client 1)

**Bounds checking.** Each protected array is tagged with its own ID; all nodes
of one linked structure share one ID. Before each access to a protected
structure, software issues `CREATE(1, TagID, meta)`, and word 0 of `meta` holds
the same TagID. The CREATE arms the client for the next access only. That access
is checked as follows:

1. look up its address;
2. compare the tag found with the value in PMT entry TagID;
3. a mismatch means the access left the structure it was meant for.

**Return-address protection.** Software tags each saved return address with
tag 1 (`RA_TAG`). With `rap_en` set, every store is looked up, and a store into
a tag-1 granule is refused. Loads of the return address stay allowed. Software
unmaps the slot when the function returns. With 512 B granules, a tagged
granule also covers its neighbours in the stack frame. The paper's evaluation of
both safety techniques uses 64 B granules (`GRAN_LOG2 = 6`).

**Stall and violation.** Both checks use force-stall lookups.

- `core_ready` is low, and `core_stall` high, from the accepted access until
  `core_done`.
- An access that needs no check finishes one cycle after acceptance.
- A violation pulses `violation`, the interrupt to the core. `viol_bounds` tells
  the two kinds apart (1 = bounds, 0 = return address) and `viol_addr` holds the
  address.

## Sharing ports

The hardware has one memory port and one TLB port. Round-robin `port_arbiter`s
share them:

- memory: the instruction unit, the lookup unit and the prefetcher;
- TLB: the instruction unit and the lookup unit (the prefetcher translates
  through lookups).

Each arbiter keeps one transaction in flight, so responses need no IDs.

## Top level: `metasys_top`

| group | ports |
|---|---|
| instructions | `cmd_valid/ready`, `cmd` (`cmd_t`), `cmd_busy`, `cmd_fault` |
| configuration | `pf_enable`, `pf_mode`, `bc_en`, `rap_en` |
| core accesses | `core_valid/ready`, `core_vaddr`, `core_store`, `core_stall`, `core_done` |
| interrupt | `violation`, `viol_bounds`, `viol_addr` |
| prefetches | `pf_valid`, `pf_addr` |
| TLB | `tlb_req_valid/ready`, `tlb_req`, `tlb_resp_valid`, `tlb_resp` |
| memory | `mem_req_valid/ready`, `mem_req` (word address, write enable, data, byte mask), `mem_resp_valid`, `mem_resp` |
| statistics | MMC hits/misses, lookups, MMT reads/writes, drops, CREATEs, prefetches, checks, violations |

All types are in `metasys_pkg`. Requests use valid/ready. A response is a
one-cycle valid pulse, exactly one per request, in order. The reset `rst_n` is
active low and asynchronous.

Parameters and their defaults:

- `GRAN_LOG2 = 9`: 512 B granules;
- `MMC_ENTRIES = 128`;
- `PF_DEPTH = 4`;
- `MAX_RANGE = 8` inside the prefetcher;
- fixed in the package: 8-bit tag and client IDs, 256 × 64 B PMTs.

At the defaults the design has about 8.9 k flip-flops plus two 128 Kib PMT
memories.

## Where this design departs from the paper, or fills gaps

- **PMT entry size.** The paper says both "512 bytes of metadata" and "64 B per
  PMT entry". 64 B is used, which matches its 16 KiB PMT.
- **ClientIDs.** The paper numbers both the prefetcher and the bounds checker as
  client 0. Here the prefetcher is 0 and the safety client 1.
- **Operand packing.** The paper gives the instruction arguments but no
  encoding. The packing above, MAPARGS, and the meaning of lenX/lenY/sizeX/
  sizeY/sizeZ are this design's choices. So are SETMMT and FLUSH as instructions.
- **Prefetcher PMT layout.** The paper gives the field widths but no positions.
  The bit positions, and the split of the 32-bit "data type" into two log2
  element sizes, are this design's choices.
- **Prefetcher neighbour walk.** The paper's graph example highlights *all*
  neighbours of a vertex. Its pseudo-code, however, follows one address per
  level. Both are supported here. The range flag (bit 144) and the bound
  `MAX_RANGE` are this design's choices.
- **Look-ahead bound.** The look-ahead target must stay inside its array. This
  is this design's choice; the paper checks only the triggering address.
- **In-structure test.** The paper's listing has a typo. This design uses
  `base <= address < base + size`.
- **Organisation.** The MMC's associativity and exact NMRU victim rule, one
  lookup at a time, round-robin ports, granule-at-a-time MAP, and dropping
  best-effort lookups on exactly an MMC miss are all this design's choices.
- **Outside this design.** The RISC-V core, its TLB and caches, DRAM, the OS
  and the software library. The core must provide:
  - issuing instructions on the `cmd` port;
  - presenting each load/store on the `core_*` port;
  - honouring `core_ready` and `violation`.
  - The TLB and memory need only the simple request/response ports above.

## Verification

Each block has a self-checking testbench in `tb/` that compares its outputs with
values the testbench computes itself:

| testbench | what it checks |
|---|---|
| `tb_mmc` | latency, capacity, NMRU victim, update/fill/invalidate interplay, against a reference map |
| `tb_pmt` | random writes/reads against a reference array; flush |
| `tb_port_arbiter` | fairness, routing of responses, one transaction in flight, random stalls |
| `tb_lookup_unit` | virtual and physical lookups, miss then hit, MMT reads only on misses, best-effort drops, TLB faults, two clients at once, the 3-cycle hit latency |
| `tb_metasys_ctrl` | MAP across pages, UNMAP, MAP2D/3D shapes, CREATE, MMC updates, SETMMT, FLUSH, faults |
| `tb_graph_prefetcher` | prefetch chains over a random CSR graph, stride and its bound, out-of-structure and untagged accesses, busy drops, the range walk over all edges of a vertex |
| `tb_safety_client` | in/out-of-bounds, one-shot arming, other client's CREATE ignored, return-address stores vs loads, enables, stall exactly while a check runs |
| `tb_metasys_top` | the whole design at default parameters (below) |

`tb_metasys_top` builds a random graph and the safety test data in a behavioural
memory behind a behavioural TLB (`mem_model`, `tlb_model`). It then exercises:

- tagging, CREATE and MMT contents;
- full prefetch chains: a first pass that misses the MMC and a second that hits;
- the range walk over all edges of a vertex;
- a busy drop and a best-effort drop;
- in-bounds, out-of-bounds and after-UNMAP accesses;
- a return-address overwrite;
- MAP2D/3D and UNMAP2D/3D;
- a translation fault;
- FLUSH.

It counts each mechanism and fails if any never happened.

`tb_workloads` runs scaled-down versions of the workload kinds the system is
meant for, on the whole design at default parameters:

- **stream:** 256 KiB read once in 64 B steps. It must give exactly one MMC miss
  per 512 B granule: 512 misses, 3584 hits.
- **random access:** a 128 KiB array, twice the MMC's 64 KiB reach. The hit
  fraction must be near one half; about 0.49 is observed.
- **graph traversal:** a BFS-ordered walk over a random CSR graph with the
  prefetcher on and the range walk enabled. Every prefetch must land on an
  element of the graph, and
  prefetched addresses must later be read.
- **bounds-checked linked list:** a pointer chase over scattered nodes. It must
  give no violation until a corrupted pointer appears.

In the graph run most triggers arrive while a chain is still being followed, and
are dropped: one chain costs several memory round trips, while the core model
issues an access every few cycles.

Every testbench ends
by printing `TB_RESULT checks=<n> failures=<n>` and has a watchdog.

To simulate with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_metasys_top \
    -y rtl -y tb +libext+.sv rtl/metasys_pkg.sv tb/tb_pkg.sv tb/tb_metasys_top.sv
./obj_dir/Vtb_metasys_top
```

Replace `tb_metasys_top` with any other testbench name. Every RTL file also
lints cleanly with `verilator --lint-only -Wall`, apart from the warnings each
module's opening comment explains.
