# HeapSafe: a RoCC coprocessor that bounds-checks tagged heap pointers

C programs running bare-metal on a RISC-V core have no protection against a
heap buffer being written past its end (heap overflow) or being used after it
was freed (use-after-free). HeapSafe moves the bookkeeping for this into a
small coprocessor attached to the core through the Rocket Custom Coprocessor
(RoCC) interface. Software marks every protected heap pointer with a *tag* in
its top bits; the coprocessor keeps a table of `{tag, base, bound}` for every
live buffer and answers, for any tagged pointer, whether it lies inside its
buffer.

The core itself is unchanged. The coprocessor only sees three custom
instructions, issued by a small runtime library around `malloc`, `free` and
pointer dereferences.

This repository holds synthesizable SystemVerilog for the coprocessor, a tile
wrapper that can hold one coprocessor per hardware thread, and self-checking
testbenches.

## Tagged pointers

A protected pointer ("safe pointer") is an ordinary 64-bit address with a
buffer tag in its most significant bits:

```
 63        56 55                                             0
+------------+------------------------------------------------+
|    tag     |                 raw pointer                    |
+------------+------------------------------------------------+
```

The tag is `TAG_W = log2(MT_SIZE)` bits wide. With the default 256-row table
that is 8 bits, as drawn above. The raw pointer is the remaining low bits.

Tag value 0 is reserved. A pointer with tag 0 is an ordinary, unprotected
pointer (user addresses have zero top bits). So 255 tags are available for
simultaneous allocations. Adding an offset to a safe pointer or copying it
keeps the tag. This is what lets a pointer that walks through a buffer still
be checked against that buffer.

## The three instructions

All three use the `custom0` major opcode (`0001011`). The RoCC instruction
format is:

| bits  | 31:25  | 24:20 | 19:15 | 14 | 13  | 12  | 11:7 | 6:0    |
|-------|--------|-------|-------|----|-----|-----|------|--------|
| field | funct7 | rs2   | rs1   | xd | xs1 | xs2 | rd   | opcode |

| instruction   | funct7    | operands                        | result |
|---------------|-----------|---------------------------------|--------|
| `hs_store`    | `0000000` | rs1 = safe pointer, rs2 = size  | none (non-blocking) |
| `hs_validate` | `0000001` | rs1 = pointer to check          | rd = 0 in bounds, 1 out of bounds (blocking) |
| `hs_free`     | `0000011` | rs1 = safe pointer              | none (non-blocking) |

The core waits for a result only when `xd = 1` and `rd != 0`. This
implementation follows that rule for every legal instruction. A store or free
sent with `xd` and a non-zero `rd` therefore gets a response of 0.

Any other opcode or funct7 is illegal. It is consumed without effect and
without a response, and it pulses `illegal` for one cycle.

## What the engine does with each instruction

**hs_store.** The rs1 value is split into tag and raw pointer. The adder
forms `bound = raw_pointer + size`. The row `{V=1, tag, base=raw_pointer,
bound}` is written into the first row whose valid bit is 0. Storing the
exclusive bound instead of the size means a later check needs only two
comparisons.

**hs_validate.** The tag of rs1 is compared with the Tag field of every valid
row at once; the table is a content-addressable memory. The result is:

| case                                        | isOOB |
|---------------------------------------------|-------|
| tag = 0 (unprotected pointer)               | 0, not checked |
| no valid row with this tag (freed or never allocated) | 1 |
| row found, `ptr < base` or `ptr >= bound`   | 1 |
| row found, `base <= ptr < bound`            | 0 |

Comparisons are unsigned. The second line is what catches use-after-free.
Once a buffer is freed, a dangling pointer still carries the old tag, but that
tag has no valid row any more.

**hs_free.** The valid bit of the row holding the tag is cleared. The row's
data is left as it is and the row becomes free for the next store.

## Block structure

```
             +-------------------------------- heapsafe --------------------------------+
 cmd_inst -->| hs_cmd_decoder --op--> hs_control --R/W strobes--+                         |
 cmd_valid ->|                          |  |                    |                         |
 cmd_ready <-|                          |  +--ve_en--+          v                         |
 cmd_rs1 --->| [cmd reg] rs1 -> hs_metadata_parser --tag------> hs_metadata_table (CAM)  |
 cmd_rs2 --->| [cmd reg] rs2 ------size--+   |raw_pointer        {V,Tag,Base,Bound} x256   |
             |                           v   v                    |base,bound,hit         |
             |                     hs_bound_adder --bound-->      v                       |
             |                                           hs_validation_engine            |
 resp_* <----| hs_resp_if <------rd data------------------------ + (isOOB)               |
             +---------------------------------------------------------------------------+
```

| module                 | role |
|------------------------|------|
| `hs_pkg`               | instruction layout, opcode and funct7 constants, operation enum |
| `hs_cmd_decoder`       | splits the instruction into fields, decodes funct7, flags illegal ones, decides whether a response is wanted |
| `hs_control`           | two-state sequencer that raises the table write / search / invalidate strobes and the two enables |
| `hs_metadata_parser`   | safe pointer -> tag, raw pointer, tag-is-zero |
| `hs_bound_adder`       | `bound = raw_pointer + size` |
| `hs_metadata_table`    | MT_SIZE-row CAM of `{V, Tag, Base, Bound}` |
| `hs_validation_engine` | the isOOB rule above |
| `hs_resp_if`           | one-entry response register with valid/ready |
| `heapsafe`             | one coprocessor, the blocks above wired together |
| `heapsafe_tile`        | top: `N_ENGINES` coprocessors, one per hart, with a command router and a response arbiter |

### The metadata table

Each row holds a valid bit and three 64-bit fields: Tag, Base and Bound. The
tag is zero-extended into its 64-bit field. Synthesis trims the bits that are
always zero.

- **Search** is combinational. Every valid row compares its tag in parallel,
  and the lowest-index match drives `rd_base` and `rd_bound`.
- **Write** goes to the lowest-index free row. A priority encoder over the
  inverted valid bits picks it.
- **Invalidate** clears every valid row whose tag matches.
- **Full table.** If all rows are valid, a store is dropped and
  `store_dropped` pulses. Software must not rely on a dropped store. The
  table has 256 rows and only 255 tags exist, so the table can fill only if
  the same tag is stored twice.
- **Duplicate tags.** Nothing prevents two rows from holding the same tag.
  The search then uses the lower row, and a free removes both.

Only the valid bits are reset. Tag, Base and Bound are never read while their
row is invalid.

At the default size the table holds 256 × 3 × 64 bits of storage. Each of the
256 rows has two tag comparators: one for search and one for free.

### Timing

One command is in flight at a time.

```
edge k   : request handshake (cmd_valid & cmd_ready); command captured
cycle k+1: EXEC — table write / search+check / invalidate; response computed
edge k+1 : table updated; response register loaded (resp_valid = 1)
edge k+2 : earliest next request handshake
```

`hs_validate` therefore returns its result one cycle after it is accepted.
With `resp_ready` held high, a validation costs three cycles from request to
response taken.

`cmd_ready` stays low while a response waits to be taken, so a core that
stalls its response port also stalls the coprocessor. Stores and frees need no
response, and one is accepted every two cycles.

### The tile and multiple harts

One engine protects the heap of one process. `heapsafe_tile` builds
`N_ENGINES` engines; engine *i* has `HART_ID = i`. Each request arrives with
`cmd_hart`, the id of the hart that issued it, and goes only to that hart's
engine. A request for a hart with no engine is accepted, dropped and flagged
on `bad_hart`. Responses from several engines are merged lowest-hart-first,
and `resp_hart` tells which engine answered. With the default
`N_ENGINES = 1` the router is a pass-through.

## Parameters

| parameter   | default | where       | meaning |
|-------------|---------|-------------|---------|
| `MT_SIZE`   | 256     | tile, engine, table, parser | metadata table rows; also sets `TAG_W = log2(MT_SIZE)` |
| `XLEN`      | 64      | all         | register and address width |
| `N_ENGINES` | 1       | tile        | number of coprocessors / harts |
| `HART_ID`   | 0       | engine      | the hart an engine serves |

`MT_SIZE` should be a power of two. With another value the tag field would
allow more tag values than there are rows.

## Where this RTL follows the published design and where it does not

These points follow the published HeapSafe design:

- the three instructions and their encodings;
- the tag in the top `log2(mtSize)` bits;
- the 256-row table of valid bit, Tag, Base and Bound;
- the bound precomputed at store time;
- the isOOB formula;
- invalidate-on-free;
- tag 0 as "not protected";
- one engine per hart.

The following are choices made here, because the published description does
not settle them:

- **The sequencer.** The two-state sequencer, the one-cycle result latency
  and the one-outstanding-response rule are this design's own. The published
  description gives no cycle timing.
- **Table details.** Lowest-free-row allocation, dropping stores when the
  table is full, and the handling of duplicate tags are this design's own.
- **Tag 0.** The published text says in one place that library operations on
  a tag-0 pointer are an error, and in another that tag-0 pointers are
  excluded from validation. Here `hs_validate` with tag 0 returns 0 (in
  bounds). `hs_store` and `hs_free` with tag 0 are ignored and pulse
  `tag_error`, which is left for software or the tile to act on.
- **An unknown tag is out of bounds.** A non-zero tag with no valid row
  returns 1. This is the use-after-free check.
- **Status and routing signals.** The `illegal`, `tag_error`, `mt_full`,
  `store_dropped`, `busy` and `bad_hart` outputs, and the hart routing, are
  additions. The published design says only that the system picks the engine
  belonging to the hart.

The following are not built:

- **The non-blocking variant.** In this variant `hs_validate` gets no
  response; instead the coprocessor raises an exception on the core. It is an
  alternative flavour, not the main design. The core-side exception path it
  needs is outside this RTL.
- **Core changes.** Top-byte-ignore address masking in the core, and
  restricting RoCC instructions to machine mode, are changes to the core.
- **The rest of the system.** The Rocket core, caches, memory system and the
  software library are not part of this RTL. The RoCC memory port is unused
  and absent.

## Simulation

Every testbench in `tb/` is self-checking. Each ends by printing
`TB_RESULT checks=N failures=M` and has a watchdog. Run one with plain
Verilator from the repository root, for example:

```
verilator --binary --timing --assert -y rtl -y tb --top-module tb_heapsafe_tile \
    -o sim rtl/hs_pkg.sv tb/hs_tb_pkg.sv tb/tb_heapsafe_tile.sv
./obj_dir/sim
```

The two packages are named on the command line because Verilator must read
them before the modules that import them; `-y` finds every other module by
its file name.

`tb/hs_tb_pkg.sv` holds instruction builders and an independent reference
model of one engine (arrays searched in order). The engine and tile
testbenches compare every response with it.

| testbench                 | what it exercises |
|---------------------------|-------------------|
| `tb_hs_cmd_decoder`       | all funct7 and opcode values plus random words against the bit layout |
| `tb_hs_metadata_parser`   | tag/raw split at 256 and 16 rows |
| `tb_hs_bound_adder`       | carries and 64-bit wrap |
| `tb_hs_validation_engine` | base−1, base, bound−1, bound, tag 0, miss, disabled |
| `tb_hs_control`           | strobes per operation, 2-cycle spacing, blocking by a pending response |
| `tb_hs_resp_if`           | hold under back-pressure, one-cycle load |
| `tb_hs_metadata_table`    | 256-row table: random traffic, fill, dropped write, row reuse |
| `tb_heapsafe`             | one engine at default size: random store/validate/free/illegal traffic, latency, back-pressure |
| `tb_heapsafe_tile`        | two engines, 16-row tables: every mechanism (in/out of bounds both sides, use-after-free, tag 0, tag-0 error, illegal, full table, bad hart, request stall, response stall, arbitration) is counted and must occur |
| `tb_heapsafe_tile_full`   | the tile with default parameters: the string upper-casing example (overflow flagged exactly at the first byte past a 32-byte buffer), 40 buffer copies with use-after-free, and filling all 256 rows |
| `tb_hs_bench_streams`     | the coprocessor traffic of the benchmark kernels median, multiply, vvadd, rsort and qsort, and of a stack/heap copy sweep (see below) |

### Benchmark instruction streams

There is no processor in this repository, so program run times cannot be
reproduced. `tb_hs_bench_streams` replays only what the coprocessor would see
for each kernel:

- one `hs_store` per array;
- one `hs_validate` per element written to the output array;
- one `hs_free` per array.

Array sizes are those of the common RISC-V benchmark data sets. The sorts are
modelled with each element written once. Each kernel needs at most three
table rows, far below the 256 available. At three cycles per validation, the
coprocessor time is about 3 × (elements written) cycles. Examples: vvadd
(1000 elements) takes 3015 cycles and qsort (2048 elements) takes 6151
cycles. How much of that time the core would hide is a property of the core,
not of this RTL.

## Changing the design

- **Table size.** Set `MT_SIZE` on `heapsafe_tile`. The tag width follows.
  The tag-extraction code in the software library must use the same width.
- **More harts.** Set `N_ENGINES`. Drive `cmd_hart` from the hart id of the
  issuing core.
- **Another funct7 assignment.** Change the constants in `hs_pkg`.
- **Lower latency.** The search, the check and the response enable are all
  combinational in the EXEC cycle. The command register could be dropped to
  answer in the cycle after acceptance, at the cost of a longer
  combinational path from the RoCC inputs through the CAM.
