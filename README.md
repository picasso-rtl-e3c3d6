# Colored capabilities: provenance checks in a CHERI load/store pipeline

CHERI capabilities make pointers unforgeable, but they do not stop a program
from using a pointer after the memory behind it was freed. The usual CHERI
fix is a revocation sweep. The sweep scans memory and clears the tag of every
capability that points into freed memory. It is correct but expensive, so
freed memory sits in quarantine until enough has piled up to make a sweep
worthwhile.

*Colored capabilities* (the PICASSO scheme) take a different approach. When
an allocation is made, the allocator writes a **provenance ID** into the
capability. Every capability derived from that one carries the same ID. A
table in memory, the **provenance-validity table (PVT)**, holds one bit per
ID: the **provenance-validity bit (PVB)**.

- `free()` sets the ID's bit with an ordinary store. From that moment, every
  load or store through any capability with that ID faults.
- A sweep is needed only to make IDs reusable, and only when the ID pool runs
  low.

This repository holds synthesizable SystemVerilog for the hardware side of
the scheme:

- the capability encoding;
- the two new CSRs;
- the `ccsettype` instruction;
- the changes to the memory pipeline: PVT address calculation, a PVT buffer,
  a dedicated TLB for PVT words, and a load/store queue that tracks each
  access's implicit PVT load.

The core itself, its data cache and its page-table walker are not included.
Their signals are ports of the top module. Behavioural models of the cache
and the walker are in `tb/` for simulation.

## How a capability becomes colored

A 128-bit CHERI capability has an 18-bit object type (otype) field. The
design widens it to 21 bits by borrowing three more bits:

| 21-bit otype bit | capability bit | normally |
|---|---|---|
| 20 | 127 (software permission) | 0 |
| 19 | 126 (software permission) | 0 |
| 18 | 109 (reserved) | 0 |
| 17..0 | 108..91 | otype |

The borrowed bits are stored inverted. An ordinary unsealed capability has
otype 18'h3FFFF and zeros in the borrowed bits, so it still reads as the
21-bit value −1 (all ones). The choice of these three bits is this design's
own; the scheme says only that one reserved bit and two software permission
bits are used.

The OTYPETH CSR decides how an otype is read (`cap_color_decode`):

| otype | meaning |
|---|---|
| −1 (all ones) | unsealed, ordinary capability |
| 0 < otype < OTYPETH | colored: otype is the provenance ID |
| otype ≥ OTYPETH | sealed (standard CHERI sealing) |

- otype 0 falls outside all three rules and is treated as sealed.
- The comparison is unsigned.
- An untagged capability is never treated as colored.
- With OTYPETH near 2^21, about 2.1 million IDs are available.

`ccsettype cd, cs1, rs2` (`ccsettype_unit`) writes ID `rs2` into capability
`cs1`. It succeeds only if all of these hold:

- `cs1` is tagged;
- `cs1` is unsealed;
- `cs1` holds the VMEM permission (bit 125);
- 0 < `rs2` < OTYPETH.

Otherwise the result keeps `cs1`'s bits with the tag cleared, and a cause is
reported (`FLT_TAG`, `FLT_SEAL`, `FLT_PERM` or `FLT_TYPE`). Only the allocator
holds VMEM, so only the allocator can color capabilities.

## The provenance-validity table

- **Location.** The table sits in the process's virtual memory. It starts at
  the address held in the PVTR CSR (`picasso_csr`). PVTR is accessible only
  in supervisor and machine mode; a user-mode access is reported on
  `csr_illegal`.
- **Layout.** ID `p` has its bit at bit address `PVTR*8 + p`.
  `pvt_addr_calc` returns:
  - the 16-byte-aligned virtual address of the 128-bit word holding the bit,
    `PVTR + 16*(p >> 7)`;
  - the bit's position in that word, `p[6:0]`.
- **Size.** The whole table is 2^21 bits = 256 KiB.
- **Encoding.** 0 means valid and 1 means retracted.
  - The kernel maps the table zeroed when it creates a process.
  - `free()` sets the bit.
  - A finished revocation sweep clears it again, so the ID can be handed out
    anew.
- **Writes.** The hardware never writes the table. Software updates it with
  ordinary stores through a capability that is allowed to write it.

## The memory pipeline

```
            stage 1 (address calc.)          stage 2 (PTLB)            queue
req_* ──► cap_color_decode ─┐
          pvt_addr_calc ────┼──► s2 register ──► ptlb lookup ──► cc_lsq ──► mreq_* (data cache)
          pvt_buffer lookup ┘                    ptlb refill ◄──┘  ▲   ──► resp_* (to core)
                                                    │             │
                                                 ptw_* (walker)   mresp_*
```

### Stage 1: address calculation

Stage 1 is combinational. It does three things:

- It classifies the capability.
- It computes the PVT word address alongside the data address.
- It looks that word up in the **PVT buffer** (`pvt_buffer`).

The PVT buffer is a 64-word, 4-way set-associative cache of PVT words. It is
indexed and tagged by the word's *virtual* address and is looked up
combinationally. A hit decides the check at once:

- if the ID's bit in the cached word is 0, no PVT load is needed;
- if it is 1, the access faults with `FLT_PROVENANCE`.

A sealed capability faults with `FLT_SEAL`.

### Stage 2: PTLB

Stage 2 is one register stage that every access passes through, colored or
not. For a colored access that missed the buffer, the **PTLB** (`ptlb`)
translates the PVT word address. The PTLB is a small fully associative TLB,
used only for implicit PVT loads.

On a PTLB miss, the queue entry asks the PTLB to refill through the core's
page-table walker (`ptw_*`):

- one refill runs at a time;
- its answer also serves other waiting entries on the same page;
- a walk that finds no mapping makes the access fault with `FLT_PVT_PAGE`.

The OS can then page in the table and retry.

### The queue (`cc_lsq`)

An access entering the queue brings the state of its provenance check:
decided, waiting for a PTLB refill, or needing a PVT load. No extra queue
entries are used for PVT loads. Each entry tracks its own.

The cache serves one access per cycle. When both want the port, the PVT load
goes first.

- **Loads.** The data load and the PVT load are sent independently, so
  their latencies overlap. The load completes only when both answers are back
  and the PVB is 0.
- **Stores.** A store is not sent to the cache until its PVT answer has
  arrived and the PVB is 0. This is what stops a write through a freed
  pointer. Like any store, it also waits until the core commits it
  (`commit_*`).
- **Squashes.** A squash (`squash_*`) names the oldest mis-speculated access.
  That access and everything younger are squashed. A squashed entry sends
  nothing new, but stays allocated until every answer it is owed has come
  back, so a late cache answer never lands in a reused entry.
- **PVT answers.**
  - If the bit is set, the access gets `FLT_PROVENANCE`.
  - If the bit is clear, the 128-bit word is written into the PVT buffer,
    unless a fence came while the load was in flight.
- **Completion.** Accesses complete in program order on `resp_*`, one per
  cycle.

### Keeping the buffers coherent

Freeing an ID and finishing a sweep are both ordinary stores to the table, so
the PVT buffer can hold stale words. The rule is that software fences after
writing the table:

- `fence` clears the PVT buffer;
- `sfence` (sfence.vma) clears the PVT buffer and the PTLB, for page-table
  changes.

A PVT word already on its way back when a fence occurs is not put into the
buffer.

## Timing

These figures use a cache that answers a load in `L` cycles. They are
counted from the clock edge at which `req_ready` accepted the access to the
cycle in which `resp_valid` shows it.

| access | latency (`L = 3`) |
|---|---|
| uncolored load | L + 4 = 7 |
| colored load, PVT buffer hit | the same: the buffer adds nothing |
| colored load, buffer miss, PTLB hit | one cycle more: the PVT load takes the port, the data load follows a cycle later |
| colored load, PTLB miss | adds the page walk |

The PTLB stage is present for every access. That is the extra cycle of
latency that colored-capability support costs ordinary code.

A store's cache write waits for:

- its PVT answer;
- its commit.

## Parameters

| module | parameter | default | origin |
|---|---|---|---|
| `pvt_buffer`, `picasso_top` | `WORDS` / `PVTB_WORDS` | 64 | as published |
| `pvt_buffer`, `picasso_top` | `WAYS` / `PVTB_WAYS` | 4 | as published |
| `ptlb`, `picasso_top` | `ENTRIES` / `PTLB_ENTRIES` | 8 | own choice |
| `cc_lsq`, `picasso_top` | `DEPTH` / `LSQ_DEPTH` | 8 | own choice |
| `cc_lsq`, `picasso_top` | `ID_W` (core tag width) | 6 | own choice |

`PVTB_WORDS = 0` builds the pipeline without a PVT buffer. The published
hardware-cost comparison uses this configuration. Every colored access then
translates and loads its PVT word, and a PVT write takes effect without a
fence. `tb_picasso_top_nobuf` tests it.

The capability width (128), ID width (21) and PVT word width (128) are
constants in `picasso_pkg`.

At the defaults, the top synthesizes (generic yosys cells) to about:

- 1300 cells;
- 3300 flip-flop bits;
- 12.5 kbit of memory, of which the PVT buffer data is 8 kbit.

## Where this design departs from, or adds to, the published scheme

Only the extension is built. CHERI's own bounds and permission checks, data
address translation and the cache stay in the core. The data address arrives
at `req_daddr` already physical.

Choices made where the scheme is silent:

- the otype bit positions;
- the CSR numbers: PVTR 0x5C0, OTYPETH 0x5C1;
- the OTYPETH access rule, which is the same as PVTR's;
- reset values of 0;
- the VMEM bit position;
- otype 0 treated as sealed;
- the order of the `ccsettype` checks;
- the PTLB size and organisation;
- the queue, chosen as the simplest that does the job:
  - an in-order FIFO;
  - in-order data issue, so there is no store-to-load forwarding;
  - completion in program order;
  - squash by the oldest squashed tag;
- PVT-buffer round-robin replacement;
- the fence rule for in-flight PVT answers;
- faulting accesses to sealed capabilities.

Not built:

- the kernel's PVT page-fault handling, which is software;
- multi-core coherence of the PVT buffer, which relies on every core fencing;
- the allocator's ID management and the revocation sweep, which are software.

## Files

Each file begins with a comment giving its interface and timing.

RTL, in `rtl/`:

- `picasso_pkg.sv`: types, layout, CSR numbers and fault causes.
- `cap_color_decode.sv`, `pvt_addr_calc.sv`, `ccsettype_unit.sv`:
  combinational.
- `picasso_csr.sv`: PVTR and OTYPETH.
- `pvt_buffer.sv`, `ptlb.sv`, `cc_lsq.sv`: the storage and control blocks.
- `picasso_top.sv`: wires them into the pipeline.

Testbenches, in `tb/`:

- one `tb_<module>.sv` per module, each self-checking and printing
  `TB_RESULT checks=N failures=M`;
- `tb_picasso_top_nobuf.sv`: the top built without the PVT buffer;
- `tb_picasso_pkg.sv`: the otype get/set helpers of the package;
- `dcache_model.sv`: a behavioural single-ported data cache with random
  latency and out-of-order load answers;
- `ptw_model.sv`: a behavioural page-table walker.

`tb_picasso_top` runs the top at its default parameters and plays the core,
the allocator and the kernel:

- it sets the CSRs;
- it colors capabilities with `ccsettype`;
- it checks the latencies above;
- it frees an ID and sees loads and stores through it fault while memory
  stays unchanged;
- it runs 1000 random groups of accesses, with squashes, commits, frees,
  sweeps and fences, against a reference model.

It also counts every mechanism and fails if one never happened. The
mechanisms counted are:

- buffer hits;
- PTLB refills beyond its capacity;
- PVT loads overlapping data loads;
- stores held for their check;
- squashed entries draining;
- full-queue stalls;
- provenance, seal and PVT-page faults.

## Simulating

With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_picasso_top \
    -y rtl -y tb rtl/picasso_pkg.sv tb/tb_picasso_top.sv
./obj_dir/Vtb_picasso_top
```

Replace `tb_picasso_top` with any other testbench name. The assertions in
`cc_lsq` check two things:

- every cache answer belongs to a live entry;
- no store reaches the cache before its check.

They use `disable iff (!rst_n)`. Verilator reports this as `rst_n` being
used both asynchronously and synchronously (`SYNCASYNCNET`). The warning is
harmless.
