# CHERI-D: object-ID checks in a CHERI load/store path

CHERI capabilities already stop a pointer from reaching outside its object.
They do not stop it from being used after the object is freed. CHERI-D fixes
that with one byte of metadata per allocation, kept in two places:

* every capability carries an 8-bit **object ID**: the lifetime it was issued for;
* every allocation slot holds an 8-bit **memory ID** (its current lifetime),
  stored in memory just outside the bounds the user's capability covers.

On every access through a capability with a non-zero ID, the hardware reads
the memory ID and compares it with the capability ID. When a slot is freed,
the allocator increments its memory ID. Every old capability to that slot
then faults at once, even though the memory can go straight back to the
allocator. After 254 lifetimes the slot is quarantined (memory ID 255). A
revocation sweep then clears the tag of every capability that still points
at it, and the slot starts again at ID 0. Because IDs are checked in
hardware, sweeps become rare: they are needed only when a slot runs out of
IDs, not whenever freed memory piles up.

This repository holds synthesizable SystemVerilog for the hardware side of
the scheme, as described in the CHERI-D paper (Wang et al.), which built it
into the CHERI-Toooba core. That means:
- the capability-field instructions;
- the ID-address computation;
- the ID check in a four-stage memory pipeline;
- the in-page ID buffer;
- the store path that cancels inline-ID stores after they commit.

The core, its TLB and its caches are not included; they appear as ports.

## 1. The capability fields and who may change them

Three fields are added to a capability (`cap_t` in `rtl/cherid_pkg.sv`):

| field  | bits | meaning |
|--------|------|---------|
| ID     | 8    | lifetime the capability may access; 0 = privileged, never checked |
| IDMODE | 1    | 0 = inline (ID in the same 64-byte line), 1 = in-page (ID in a table at the top of the 4 KiB page) |
| IDLOC  | 6    | where the ID byte sits in that region; 0 = no ID |

`cherid_cap_ops` executes the four instructions that touch these fields.
It is combinational:

* `cgetcapID`, `cgetIDloc`: read the fields. No authority is needed.
* `csetcapID`: sets the ID.
* `csetIDloc`: sets IDMODE and IDLOC. It is privileged.

The set instructions follow the guarded-manipulation rules. A rule that is
broken clears the tag of the result:

1. If the source capability's ID is non-zero, no field may change. This makes
   user capabilities' IDs immutable.
2. A non-zero IDLOC must place the ID byte inside the source capability's
   bounds. You can only point at an ID you could read.
3. A non-zero ID requires a non-zero IDLOC.

So only an allocator, holding an ID-zero capability over the whole slot
including its ID byte, can make an ID capability. It does so in this order:
`csetIDloc`, then `csetcapID`, then it narrows the bounds so that the ID byte
falls outside the capability it returns. Most of `cap_out` (base, top,
cursor) passes straight through: these instructions never change the bounds.

## 2. Where the ID byte is

`cherid_id_addr` turns a data address into an ID address:

    inline : ID = line_base(addr) + IDLOC - 1           (line = 64 B)
    in-page: ID = page_base(addr) + 4096 - IDLOC - 1    (page = 4 KiB)

The region (line or page) is found from the *data* address rather than from
the capability's bounds. Any narrower capability derived from the original
therefore still finds the same ID.

* **Inline mode** is for objects that fit in one line. The allocator puts the
  ID in the slot's padding: for a slot at line offset `o` of size `s`,
  IDLOC = `o + s`. The ID byte then arrives with the data, so checking a load
  costs nothing.
* **In-page mode** serves objects of up to a page. The top 64 bytes of each
  page form an ID table, and IDLOC selects an entry, counting down from the
  last byte.

Two limits follow from the 6-bit field. They are not discussed in the paper:

* An inline slot that ends exactly at the end of a line would need IDLOC = 64,
  which does not fit. Such a slot must use in-page mode or a larger size class.
* IDLOC = 0 means "no ID". So the in-page table entry at the very last byte of
  the page cannot serve a slot, leaving 63 usable entries rather than 64.

## 3. The memory pipeline (`cherid_lsu`)

Operations (`mop_e`): `LOAD`, `STORE`, `SETMEMID` (csetmemID), `GETMEMID`
(cgetmemID) and `FENCE`. Each request carries its capability and an offset
from the cursor. The stages take the paper's names:

| stage | work |
|-------|------|
| AC (address calculation) | VA = cursor + offset. Tag, alignment and bounds checks. ID address computed from the VA. |
| TR (translation) | TLB port (VA → PA, combinational). For in-page capabilities, the ID buffer is looked up with the *virtual* ID address; on a hit the IDs are compared here, before the store commits. |
| IS (issue) | In-page buffer miss: read the page's ID-table line, fill the buffer and compare. Loads then go to the cache; stores are committed into the store guard; fences wait for the store guard to drain and flush the ID buffer. |
| RS (response) | Inline loads: the ID byte is taken from the returned line and compared in the same cycle. The response carries data or an exception code. |

When and how each access is checked:

| capability | load | store |
|------------|------|-------|
| ID = 0 | no check | no check |
| inline ID | in RS, from the data line; precise `EXC_ID`; no extra cycles | commits at once; the store guard checks it later and drops the write on mismatch (no exception) |
| in-page ID, buffer hit | in TR; precise `EXC_ID`; no extra cycles | in TR; precise `EXC_ID`, nothing written |
| in-page ID, buffer miss | one extra line read in IS, then as a hit | same |

The two instructions that work on the memory ID itself:

* **`SETMEMID`** writes the byte at the capability's ID address. It passes the
  normal bounds check, so a user capability, whose bounds exclude the ID, gets
  `EXC_BOUNDS`. It also requires a capability ID of zero (`EXC_ID_PERM`).
* **`GETMEMID`** reads that byte. It needs only a valid tag. This is the probe
  that the revoker and the free path use.

A fence is an operation of the pipeline: no younger operation enters until it
has finished.

Timing at the ports: a request accepted in cycle *t* reaches TR at *t+1* and
issues at *t+2*. The response comes one cycle after the cache returns the
line. So with a memory latency of L cycles, a load takes L + 3 cycles from
acceptance to response, whether its capability has ID zero, an inline ID or a
buffered in-page ID. An in-page buffer miss adds L + 2 cycles: one ID-table
line read, a cycle to take the ID, and a cycle to issue again. `tb_cherid_lsu`
checks these numbers exactly.

Simplifications of this model, all in-order and much simpler than an
out-of-order core:
- one line transaction is outstanding at a time;
- loads do not forward from pending stores: they wait until the store guard
  is empty;
- the TLB never faults;
- loads are zero-extended;
- accesses must be naturally aligned.

## 4. The ID buffer (`cherid_id_buffer`)

It holds chunks of in-page ID tables:
- 64 entries, 4-way set-associative;
- 16 IDs per entry, so a 64-byte table fills four entries;
- looked up by *virtual* ID address, so the check does not wait for
  translation;
- every entry is invalidated on a fence.

The buffer is not coherent. Software must fence after writing any memory ID,
and the allocator model in the testbenches does so.

Choices of this implementation:
- **Set index.** The 16 sets are indexed by `{IDaddr[13:12], IDaddr[5:4]}`.
  Bits [11:6] are the same for every in-page ID, so indexing with low bits
  alone would use only four sets.
- **Tag.** The whole chunk address.
- **Replacement.** Round-robin within a set.
- **Timing.** Lookup is combinational; fill and flush take effect at the next
  edge, and flush wins over a fill in the same cycle.

## 5. The store guard (`cherid_store_guard`)

An out-of-order core cannot afford to hold every store until its inline ID
has been fetched. So inline-ID stores commit first and are checked on their
way to memory. Every committed store enters a 4-deep FIFO, which drains as
follows:

1. **Checked store** (inline-ID capability): read its line, compare the byte
   at the ID offset with the capability ID, then write the bytes on a match.
   On a mismatch, drop the write and pulse `cancel`.
2. **Unchecked store** (ID-zero capability, `SETMEMID`, or an in-page store
   that was checked before commit): written directly.

Security is kept: a stale pointer can never change memory. The exception is
lost, though: the program is not told at the faulting instruction.
`cherid_mem_arb` shares the single cache line port between the guard (served
first) and the pipeline, with one transaction outstanding.

## 6. What software must do

The hardware only compares IDs; the lifetime policy is software's. The slot
lifetime the testbenches model:

```
           malloc                         free, cap ID < 254: memory ID += 1
  free  ---------->  allocated  -------------------------------------------> free
                         |
                         | free, cap ID == 254: memory ID := 255
                         v
                    quarantined --sweep--> revoked --memory ID := 0--> free
```

* **Double free.** At free, the allocator compares the memory ID
  (`GETMEMID`) with the capability ID. If they differ, the slot was already
  freed.
* **Sweep.** The revoker reads the memory ID of every capability with a
  non-zero ID. It clears the tag of those whose slot reads 255.
* **Fence.** A fence is needed after every memory-ID write.

## 7. Top level (`cherid_top`)

| port group | direction | meaning |
|------------|-----------|---------|
| `capop*` | in/out | capability-field instruction (combinational) |
| `req_valid/ready`, `req` (`mreq_t`) | in | memory operation |
| `resp_valid`, `resp` (`mresp_t`) | out | exception code (`exc_e`) and read data; always accepted |
| `tlb_va` / `tlb_pa` | out / in | translation, answered in the same cycle |
| `dc_req_valid/ready`, `dc_req` (`lreq_t`), `dc_resp_valid`, `dc_resp_rdata` | out/in | 64-byte-line port to the data cache, one in-order response per request (reads and writes) |
| `ev_*` | out | one-cycle event pulses: buffer hit and miss, ID fault, wait for the store guard, fence, store cancelled, store written |

Parameters (defaults): `IDBUF_ENTRIES` = 64, `IDBUF_WAYS` = 4 and
`IDS_PER_ENTRY` = 16, all from the paper; `SQ_DEPTH` = 4, this design's
choice. All modules reset asynchronously on `rst_n` low.

## 8. How far to trust it; where it departs from the paper

Taken from the paper:
- the field widths and the meaning of ID 0 and ID 255;
- both ID-address formulas and the tag-clearing rules;
- the privileged `csetIDloc`;
- which accesses get precise exceptions and which stores are cancelled;
- the stage names;
- the ID-buffer size, organisation, virtual-address lookup and fence flush.

This design's own, where the paper is silent:
- the capability is an unpacked record (no compressed encoding or bit layout);
- the operand encodings of the instructions and the exception codes;
- an unprivileged `csetIDloc` raises a fault and leaves the capability unchanged;
- the ID location for the bounds rule of `csetIDloc` is computed from the
  capability base;
- the whole micro-architecture: in-order pipeline, no store forwarding,
  store-guard FIFO and read-compare-write, arbiter;
- ID-buffer indexing and replacement.

Not covered:
- the core, TLB, caches and DRAM;
- the allocator and the revoker, which are software;
- the paper's simulated "scalable inline-ID" mode for objects larger than a page.

## 9. Simulating

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. `tb_line_mem.sv` is a behavioural line
memory that stands in for the cache. For example:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
    -y rtl -y tb rtl/cherid_pkg.sv tb/tb_cherid_top.sv --top-module tb_cherid_top
./obj_dir/Vtb_cherid_top
```

| testbench | what it shows |
|-----------|---------------|
| `tb_cherid_id_addr` | both formulas, directed and random |
| `tb_cherid_cap_ops` | the allocator sequence and every tag-clearing rule, against a reference model |
| `tb_cherid_id_buffer` | hits, misses, 16 sets, round-robin eviction, flush; random phase against a model |
| `tb_cherid_store_guard` | unchecked, matching and mismatching stores; order; a full queue |
| `tb_cherid_lsu` | exact load latency with and without ID checks; buffer miss; precise and imprecise faults; `SETMEMID`/`GETMEMID`; fence; waiting for stores; 4,000 random operations on one page against a byte-level model |
| `tb_cherid_top` | end to end at the default size: one slot through all 254 lifetimes, quarantine, sweep, revocation and reuse; also use-after-free, double free and cancelled stores, with each mechanism counted |
| `tb_cherid_alloc_trace` | 60,000 random malloc/free/load/store/double-free operations with thread-cache-like reuse; each access checked against a liveness and data model |
