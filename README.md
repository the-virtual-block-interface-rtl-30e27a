# Virtual Block Interface hardware in SystemVerilog

Conventional virtual memory does two jobs in one set of structures. Every
process has its own large virtual address space, and page tables map it to
physical memory. The same page tables also carry the protection bits, so the
core must translate an address before it may touch even its first-level cache.

The Virtual Block Interface (VBI) separates these two jobs:

* **One global address space.** All data lives in a single 64-bit address
  space. That space is made of *virtual blocks* (VBs) in eight fixed sizes,
  from 4 KB to 128 TB. A program asks for a VB of about the size of a data
  structure and uses it through a small per-program table.
* **Protection stays in the core.** Each running program (a *client*) has a
  *Client-VB Table* (CVT). The CVT lists the VBs the client may use and with
  which read/write/execute rights. The core checks every access against its
  CVT entry, then forms the global *VBI address*. This check is cheap
  because it works per VB, not per page.
* **Translation moves below the caches.** VBI addresses are global and
  unique, so all on-chip caches are tagged with them. A physical address is
  needed only when a line leaves the last-level cache (LLC) or misses in it.
  That translation belongs to the *Memory Translation Layer* (MTL) in the
  memory controller. The MTL also owns physical memory allocation, so it can:
  * choose a translation structure per VB;
  * put off allocating memory until data is really written back;
  * reserve contiguous memory so that a whole VB needs one TLB entry.

This RTL builds the hardware of one core and its memory controller:

* the core-side protection path (CVT cache and checks);
* the attach/detach machinery that edits CVTs;
* the MTL with its VIT cache, two TLB levels, translation walker and frame
  allocator.

The core, the caches, DRAM and the operating system stay outside, behind
ports.

```
   OS instructions ──► vbi_top ─┬─ cvt_manager (attach / detach) ──┐ refcount
                                │                                  ▼ commands
   core: {CVT index, offset} ──►├─ cvt_unit ─ cvt_cache            mtl ─┬─ vit_cache
       ◄── fault / VBI address  │     └ access_check                    ├─ mtl_tlb ─ mtl_tlb2
                                │                                       ├─ translation_walker
   LLC misses / writebacks ────►┴──────────────────────────────────►    └─ frame_allocator
                                      all memory traffic ── mem_arbiter ──► physical memory
```

## Addresses

### VBI address

```
 63   61 60                                  k k-1                  0
 ┌──────┬─────────────────────────────────────┬─────────────────────┐
 │SizeID│               VBID                  │       offset        │
 └──────┴─────────────────────────────────────┴─────────────────────┘
 k = 12 + 5*SizeID:  SizeID 0..7  →  4 KB, 128 KB, 4 MB, 128 MB, 4 GB, 128 GB, 4 TB, 128 TB
```

The offset of size class *s* has 12 + 5·*s* bits. The VBID fills the bits
between the offset and the 3-bit SizeID: 49 bits for 4 KB VBs, 14 bits for
128 TB VBs. SizeID and VBID together name a VB everywhere in the system; this
name is its VBUID.

This RTL holds a VBUID in a fixed 52-bit form: the upper 52 bits [63:12] of
the VB's first byte. For classes above 4 KB, the low bits of this field are
zero. The VBI address of a byte is then `{vbuid, 12'b0} | offset`, an OR
with no shifting. The helpers `vbuid_of`, `vb_offset` and `vbid_of` in
`vbi_pkg` convert between the forms.

### Program (virtual) address

A program addresses data as `{CVT index[63:48], offset[47:0]}`. The index
selects the entry of its CVT that names the VB, so a program never holds a
VBUID. The 48-bit offset covers the largest class, 128 TB (47 bits).

## The protection path (`cvt_unit`, `cvt_cache`, `access_check`)

### Clients and their CVTs

A client is identified by a 16-bit client ID. The core is tagged with the ID
of the client it is running.

For each client, a 16-byte *descriptor* sits in a table at `client_tbl_base`:

| word | contents |
|------|----------|
| 0 | physical address of the client's CVT |
| 1 | `{capacity[63:32], size[31:0]}` in entries |

A CVT entry is 64 bits: `{valid, R, W, X, 8 reserved bits, vbuid[51:0]}`.

Switching clients (`OS_SET_CLIENT`) has two effects:

* the unit reads the new descriptor and keeps base and size in registers;
* the 64-entry direct-mapped CVT cache is flushed, so it only ever holds the
  running client's entries.

### Checking an access

For every access, `cvt_unit` does the following:

1. Compares the CVT index with the CVT size: index ≥ size gives
   `FAULT_INDEX`.
2. Looks the index up in the CVT cache (set = low 6 index bits, tag = the
   rest). On a miss, it reads the 64-bit entry from memory and fills the
   cache. An invalid entry also gives `FAULT_INDEX`.
3. Passes the entry to `access_check`, which is pure logic:
   * a load needs R, a store W and an instruction fetch X, otherwise
     `FAULT_PERM`;
   * the offset must be smaller than the VB size, otherwise `FAULT_RANGE`;
   * if both checks pass, the output is the VBI address.

When several faults apply, the index fault wins over the permission fault,
and the permission fault wins over the range fault.

Timing:

* a hit answers one cycle after the request is accepted;
* a miss adds one memory round trip;
* one access is in flight at a time.

The VBI address is what a cache hierarchy would be looked up with. In this
design it leaves on `cpu_rsp_vbi_addr`.

### attach and detach (`cvt_manager`)

The OS never writes a CVT directly; it uses two instructions.

**attach(CID, VBUID, RWX)**

1. Reads the client descriptor.
2. Scans the CVT one entry per memory read for the first invalid entry.
3. If there is none, it appends at index `size`, provided `size < capacity`.
4. Asks the MTL to increment the VB's reference count.
5. Writes the entry. On an append it also writes `size + 1` back into the
   descriptor.

It returns the entry's index and the new reference count. It fails and
changes nothing in these cases:

* the VB is not enabled (the MTL refuses the increment);
* the CVT is full.

**detach(CID, VBUID)**

1. Finds the first valid entry that names the VB.
2. Clears its valid bit.
3. Decrements the reference count.

When the returned count is zero, the OS is expected to issue `disable_vb`.

Both instructions keep the CVT cache coherent with memory:

* they send an invalidation for the entry they wrote;
* on an append, they also send the new CVT size to `cvt_unit`.

## The Memory Translation Layer (`mtl`)

The MTL takes two kinds of requests, one at a time.

**Management commands** (enable, disable and reference counts) keep one
128-bit *VB Info Table* (VIT) entry per VB:

```
 word 0: enable[0], ttype[2:1], props[31:16], refcnt[47:32]
 word 1: ptr — base of a directly mapped VB, or root of its table
```

Each size class has its own VIT, at `vit_base[SizeID]`, indexed by VBID.
Entries are written through to memory and to the 32-entry direct-mapped
`vit_cache`.

| command | action |
|---|---|
| `enable_vb` | sets `enable`, stores `props`, starts the count at 0, with no translation structure (`TT_NONE`). Fails if the VB is already enabled. |
| `disable_vb` | returns every frame the VB owns or has reserved to the allocator, removes the VB's entries from both TLB levels (the second level by a sweep over its 128 sets) and clears its VIT entry. |
| reference-count increment / decrement | come from attach and detach. |

**LLC requests** are line reads (LLC misses) and line writes (dirty
writebacks), both by VBI address. A request to a VB that is not enabled
returns `llc_rsp_err`. Otherwise the MTL does the following:

1. Fetches the VIT entry, from the VIT cache or from memory.
2. Looks up `(VBUID, offset)` in the 64-entry fully associative `mtl_tlb`.
   An entry covers either one 4 KB page or a whole directly mapped VB, and
   stores its own region size.
3. On a hit to a page entry, it accesses memory at once.
4. For a table-mapped VB that misses there, it asks the 512-entry 4-way
   second level, `mtl_tlb2`, which holds only 4 KB mappings. The answer
   comes one cycle later. A hit refills the first level and goes to memory.
5. Otherwise, or on a hit to a whole-VB entry, it starts the walker. For a
   whole-VB hit, the walker only has to ask the allocator whether the frame
   in question has been allocated yet.
6. Fills both TLB levels with the result and accesses memory.

### Delayed allocation

Enabling a VB allocates no memory. Memory is allocated when data is first
written back:

* A **read** that reaches a 4 KB region with no frame gets a line of zeros
  on `llc_rsp_rdata`, with `llc_rsp_zero` set. No memory access is made for
  the data, and no table is created.
* A **writeback** to such a region first allocates a frame, zero-fills it
  with 64 line writes, links it into the VB's structure, then writes the
  line.

A program therefore pays for memory only where it has stored data. A VB that
is read before it is written reads as zero, just as freshly allocated memory
would.

### Translation structures (`translation_walker`)

A VB with no structure gets one at its first allocation. The walker picks
one of three kinds:

| kind | when | what the VIT pointer holds | cost of a TLB miss |
|---|---|---|---|
| `TT_DIRECT` | 4 KB VBs, and any VB whose whole size could be reserved | base of a contiguous run | an allocator query, no memory read |
| `TT_SINGLE` | 128 KB and 4 MB VBs | one table of 32 or 1024 64-bit entries (4 KB or 8 KB) | one memory read |
| `TT_MULTI` | 128 MB and larger | root of a radix table, 9 bits per level, 2–4 levels | one read per level |

The fixed size-based choice is the static policy. *Early reservation*
(`EARLY_RESERVE = 1`, the default) improves on it. On a VB's first
allocation, the walker asks the frame allocator to reserve an aligned free
run as large as the whole VB. If that succeeds:

* the VB becomes `TT_DIRECT`;
* its frames are then allocated one at a time inside that run, at
  `base + offset`;
* one TLB entry covers the whole VB.

If no run as large as the VB is free, the VB is reserved sparsely. The
walker tries each smaller size class in turn, down to 128 KB, and reserves
the first aligned block it finds. The VB is then mapped through a table
(single-level or multi-level, as the static policy would pick), and the
allocator hands out frames from the reserved block first. Neighbouring
pages of the VB therefore sit close together in memory. With the default
16 MB of memory, VBs of 4 MB and less can be reserved whole; larger ones get
one reserved block of at most 4 MB. If not even 128 KB is free, the walker
uses the static policy with no reservation.

Table entries are `{frame[63:12], 11 reserved bits, valid[0]}`. Table levels
are taken from the top of the offset down. The top level takes the bits left
over after whole 9-bit levels. Every new table is a zero-filled 4 KB frame.
The 8 KB table of a 4 MB VB takes an aligned pair of frames, reserved
together.

### Frame allocator (`frame_allocator`)

The allocator keeps one state per 4 KB frame: allocated, reserved, and the
owning VBUID. Frames below `RESERVED_FRAMES` hold the system tables and are
never given out. It offers these operations:

* **ALLOC** picks a frame in three priorities:
  1. a free frame reserved for this VB;
  2. an unreserved free frame;
  3. a free frame reserved for another VB.

  Memory can thus be used up entirely even when reservations are spread
  over it.
* **RESERVE** finds a naturally aligned run of 2^k free, unreserved frames
  and marks the run reserved.
* **ALLOC_AT** allocates one named frame (used inside a reserved run).
* **QUERY** tells whether a frame is allocated to a given VB.
* **FREE_VB** releases everything a VB holds.

ALLOC, RESERVE and FREE_VB scan one frame per cycle. ALLOC_AT and QUERY take
one cycle. After reset the table is cleared over `NUM_FRAMES` cycles, and
the MTL accepts nothing until then.

## Top level (`vbi_top`)

`vbi_top` wires the blocks together with a small sequencer for OS
instructions.

The OS instruction port carries `os_op` (one value of `os_op_e`):

| `os_op` | goes to |
|---|---|
| `OS_ENABLE_VB`, `OS_DISABLE_VB` | the MTL |
| `OS_ATTACH`, `OS_DETACH` | the CVT manager |
| `OS_SET_CLIENT` | the CVT unit |

One instruction runs at a time, and `os_done` pulses with these results:

* `os_err`;
* `os_index` (for attach);
* `os_refcnt` (for attach and detach).

Core accesses are held off while a client switch is in progress.

The three memory masters share the line-wide memory port through
`mem_arbiter`:

* it uses fixed priority: CVT fetches first, then the CVT manager, then the
  MTL;
* it keeps the port locked to one master until that master's response
  returns.

Memory requests are whole 64-byte lines with byte strobes. Each response
(read data or write acknowledgement) is a one-cycle pulse.

Boot configuration is plain inputs:

* `client_tbl_base`;
* one `vit_base` per size class.

All of these tables must lie in the first `RESERVED_FRAMES` frames. The
testbenches use this layout:

| region | addresses |
|---|---|
| client table | 0x1000 |
| VITs | 0x10000 + 0x4000·SizeID |
| CVTs | 0x40000 + 0x1000·client ID |

Statistics counters are brought out as ports:

* CVT cache hits and misses;
* TLB hits and misses in both levels;
* VIT cache misses;
* zero lines;
* VBs mapped directly;
* table reads;
* free frames.

### Parameters

| parameter | default | meaning |
|---|---|---|
| `CVT_CACHE_ENTRIES` | 64 | CVT cache size (direct-mapped) |
| `TLB_ENTRIES` | 64 | first-level MTL TLB size (fully associative) |
| `TLB2_ENTRIES`, `TLB2_WAYS` | 512, 4 | second-level MTL TLB |
| `VIT_CACHE_ENTRIES` | 32 | VIT cache size (direct-mapped) |
| `VIT_ENTRIES` | 1024 | VBs per size class the VITs hold |
| `NUM_FRAMES` | 4096 | 4 KB frames of physical memory (16 MB) |
| `RESERVED_FRAMES` | 128 | frames kept for system tables |
| `EARLY_RESERVE` | 1 | whole-VB reservation on first allocation |

Where the defaults come from:

* The 64-entry CVT cache is the size the VBI proposal argues for.
* The 64-entry first-level TLB and the 512-entry 4-way second level match
  the data TLBs of the evaluated system.
* The memory size, VIT size and VIT cache size are this design's own
  choices.

## Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. `tb/mem_model.sv` is a
behavioural memory, with functions the testbenches use to set up and
inspect tables directly.

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/vbi_pkg.sv tb/tb_vbi_top.sv --top-module tb_vbi_top
./obj_dir/Vtb_vbi_top
```

Replace `vbi_top` by any block name to run its unit test.

`tb_vbi_top` runs the whole design at its default parameters:

* 16 MB memory;
* 64-entry CVT cache and first-level TLB;
* 512-entry 4-way second-level TLB;
* 32-entry VIT cache.

It plays the OS, the core and a cache-less LLC, and keeps a reference model
of every CVT and of all data. It performs:

* three clients, with switches between them;
* eight VBs in five size classes, one shared by two clients and one never
  enabled;
* 4000 random operations;
* a full teardown, after which every frame must be free again.

It counts each mechanism and fails if one never occurs:

* CVT cache hits and misses;
* all three fault kinds;
* zero lines;
* reads of data written earlier, including through the shared VB;
* TLB hits and misses in both levels;
* VIT cache misses;
* direct mapping by early reservation;
* table walks;
* refused attaches;
* enable and disable.

It finishes in well under a second.

## Departures from the VBI proposal

* **The MTL is hardware.** The proposal sees the MTL as software on a small
  programmable core in the memory controller. Here its work is fixed state
  machines.
* **A scan replaces the buddy allocator.** The allocator gives the same
  aligned placement as buddy free lists, at one frame per cycle. Only 4 KB
  frames and whole-VB runs are handled.
* **Sparse reservation reserves one block.** When the whole VB does not
  fit, one block of the largest class that fits is reserved, on the VB's
  first allocation only. Further blocks are not reserved as the VB grows;
  its later frames come from the normal priority order. If another VB takes a frame
  inside a direct VB's reserved run (priority 3), a later writeback to that
  frame fails instead of converting the VB to a table.
* **Merged TLB types.** In the first level, page entries and whole-VB
  entries share one array instead of sitting in separate TLBs. The
  second level holds only pages.
* **Translation starts at the LLC.** The proposal starts translation at the
  L2 miss, in parallel with the LLC lookup. Here the MTL is asked only by
  LLC misses and writebacks.
* **Not built:**
  * VB cloning with copy-on-write (`clone_vb`) and `promote_vb`;
  * swapping and memory-mapped files, which need an interrupt to the OS;
  * lazy cleanup of cached lines of disabled VBs;
  * property-driven placement in hybrid memories;
  * MTLs spread over several memory controllers;
  * the core, the caches, DRAM and the OS.
* **Own formats.** The bit layouts of CVT entries, VIT entries, table
  entries and the client descriptor are this design's. So are the instruction
  interface and the 9-bit table levels. The proposal fixes none of them.
* **Virtual machines.** The 5-bit VM ID that the proposal places after the
  SizeID is simply part of the VBID here. The hardware needs nothing extra
  for it.

## Lint notes

A few signals are unused by design, for example reserved fields of table
entries and the upper bits of a memory response that a block does not need.
Verilator reports these as unused-signal warnings. The synchronous/asynchronous
net warning on the arbiter comes from its handshake assertion, which uses the
reset in its `disable iff`.
