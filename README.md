# A sliced GPU register file with static data compression

Most values held in GPU registers need far fewer than 32 bits. Small loop
counters, pixel coordinates and low-precision floats are common examples. A
compiler can prove this ahead of time, using range analysis for integers and
precision tuning for floats. Knowing that, it can pack several narrow values
into one 32-bit register. The kernel then needs fewer physical registers per
thread, so more warps fit on a streaming multiprocessor (SM).

This RTL is the hardware half of that scheme. It is a Fermi-class SM register
file together with its operand collector. The hardware gets three jobs:

- **Find** a packed operand. It may be spread over two physical registers.
- **Unpack** it on reads: realign it, sign-extend or zero-fill it, and widen
  narrow floats back to IEEE single precision.
- **Pack** results on writeback: narrow floats, and place the slices under a
  write mask so the neighbours sharing the register are left untouched.

Everything is driven by a table loaded once per kernel. Nothing is decided
dynamically.

## Slices, masks and the indirection table

A 32-bit thread register is divided into eight **slices** of 4 bits.

- Slice *i* is bits `[4i+3:4i]`.
- An operand occupies whole slices. A 12-bit value takes 3 slices, for example.

A warp register is the same slice position across all 32 threads. It is
1024 bits wide, and every thread of the warp uses the same slice positions.

Every architectural register name (0..255) of the kernel has one 32-bit
**indirection-table entry**:

```
 31      24 23      16 15       8 7        0
+----------+----------+----------+----------+
|    r0    |    r1    |    m0    |    m1    |
+----------+----------+----------+----------+
```

- `r0` and `r1` are register names.
- `m0` and `m1` are 8-bit slice masks. Bit *i* of a mask stands for slice *i*.
- The operand's low-order slices go into the set bits of `m0` in register
  `r0`, filled from the lowest set bit upward.
- The remaining high-order slices go into the set bits of `m1` in `r1`.
- Total width of the operand = popcount(`m0`) + popcount(`m1`) slices.
- If `m1` is zero, the operand is **unsplit** and `r1` is ignored.

Example: an operand of 4 slices with `r0 = 0, m0 = 1000_0000` and
`r1 = 1, m1 = 0100_1100`.

- Data slice 0 sits in slice 7 of register 0.
- Data slices 1, 2 and 3 sit in slices 2, 3 and 6 of register 1.

Mapping a register name to a physical warp register:

- Physical address = `wbase + name`. `wbase` is the warp's first register and
  arrives with each instruction and each writeback.
- Bank = the low 4 bits of the address.
- Row = the next 6 bits.

The compiler is expected to:

- give a float at least two slices, because 8-bit is the narrowest float
  format;
- never let a narrow operand straddle more than two registers.

Neither rule is checked in hardware.

### Float formats

A float of *n* slices uses this split (all formats also have a sign bit):

| bits | 32 | 28 | 24 | 20 | 16 | 12 | 8 |
|------|----|----|----|----|----|----|---|
| exponent | 8 | 7 | 6 | 5 | 5 | 4 | 3 |
| mantissa | 23 | 20 | 17 | 14 | 10 | 7 | 4 |

The formats follow IEEE 754 conventions:

- The bias is 2^(E-1)-1.
- An all-ones exponent encodes infinity (mantissa zero) or NaN.
- An all-zeros exponent is zero. Denormals are flushed to zero in both
  directions.

Narrowing (on writeback):

- The mantissa is **truncated**. There is no rounding.
- An exponent too large for the format gives a signed infinity.
- An exponent too small gives a signed zero.
- NaN stays NaN.

Widening (on read) is exact.

## Read path

An isolated, unsplit operand takes **5 clock edges** from the edge that
accepts the dispatched instruction to the edge that raises `ex_valid`. A split
operand takes 6. Bank or table conflicts add one cycle per lost arbitration.

1. **Dispatch.** Up to two instructions per cycle (`disp_*`) are each
   allocated to a free collector unit (CU). There are 16 CUs, and ports take
   them lowest-free-first. An instruction carries:
   - warp id and `wbase`;
   - an opaque 32-bit `tag` (opcode, destination and so on);
   - three source operands, each with a valid bit, a signed bit and a float
     bit.
2. **Source indirection table.**
   - The table holds 256 entries in 16 single-ported banks; entry *a* is in
     bank *a* mod 16.
   - Every CU asks for the entries of its operands.
   - An arbitrator grants at most one lookup per table bank and per CU per
     cycle.
   - The entry comes back one cycle after the grant.
3. **Register fetch.**
   - For each part (r0, then r1 if split) the CU raises a read request to the
     main arbitrator. The request carries the physical address and the
     extraction info (`m0`, `m1`, part, signed).
   - Per cycle the arbitrator grants at most one read per bank and one part per
     CU.
   - The bank read is registered.
4. **Extraction and crossbar.**
   - In the cycle after the read, the bank's **value extractor** turns the raw
     row into this part's share of the operand, right-aligned (below).
   - The crossbar delivers it to the CU that owns the read.
   - The CU puts the first part to arrive into the operand field and ORs the
     second one in. The two parts arrive in either order.
5. **Issue and conversion.**
   - An instruction whose valid operands are all ready competes for one of
     two issue slots. The choice is round-robin over the CUs.
   - Float operands narrower than 32 bits pass through one of six **warp value
     converters**, one per issue slot and operand.
   - The result is registered onto `ex_*`.
   - The CU is freed when its instruction moves into the output register.
   - `ex_ready` stalls a slot. The execution units are outside this design.

### Value extractor

Each bank has one extractor, made of 32 identical thread extractors (`tve`).
A thread extractor has:

- eight 9:1 multiplexers on 4-bit nibbles, one per output slice;
- one 2:1 multiplexer that picks the fill nibble (`0000`, or `1111` for a
  negative signed integer);
- a state with no select active, which outputs `0000`.

The select lines are computed once per bank from the masks (`value_extractor`)
and shared by all threads, as every thread of a warp uses the same slice
positions.

Part 0 (read from `r0`):

- Output slice *k* takes the input slice of the *k*-th set bit of `m0`.

Part 1 (read from `r1`):

- Output slices `p0 .. p0+p1-1` take the set slices of `m1`, where `p0` and
  `p1` are the popcounts of `m0` and `m1`.
- Output slices below `p0` are zero, so the OR in the CU leaves part 0 intact.

Sign and fill:

- Only the part that holds the operand's top slice fills the slices above the
  operand.
- A signed integer is filled with copies of its top bit. Everything else is
  filled with zeros.

### Value converter

A thread value converter (`tvc`) widens a float of *n* slices by:

- rebiasing the exponent;
- shifting the mantissa into place.

Special cases are kept: zero, infinity and NaN. A denormal input reads as zero.
The converter is combinational and sits just before the issue register, so it
adds one pipeline stage.

## Write path

The writeback bus carries up to three results per cycle (`wb_*`). Each result
has:

- `wid` and `wbase`;
- the architectural destination;
- a float bit;
- 1024 bits of data.

The bus is accepted whole while `wb_ready` is high.

1. **Destination indirection table.** This is a separate copy of the table,
   loaded with the same data, so that reads and writes do not compete.
   - Results first enter a **conflict buffer** of `BUF` = 4 warp registers.
   - Each cycle, the oldest buffered results are looked up. At most one is
     looked up per table bank, and up to three in total.
   - Results that lose a bank conflict wait in the buffer, keeping their age.
   - `wb_ready` is high only while at least three entries are free, so a
     whole beat always fits.
   - `wb_conflict` pulses when a result was held back. `wb_buf_count` shows
     the occupancy.
2. **Value truncator.** There are three warp truncators of 32 thread
   truncators each (`tvt`), one per looked-up result. Each works in two steps:
   - Step 1: a float is narrowed to the format of popcount(`m0`)+popcount(`m1`)
     slices.
   - Step 2: the value is cut into slices and scattered. The low slices go to
     the `m0` positions of the `r0` word, and the rest to the `m1` positions of
     the `r1` word.

   The result is up to six bank writes, each with its slice mask. The
   truncator is combinational, between two pipeline registers.
3. **Bank write.**
   - A second arbitrator instance grants each bank's single write port to one
     of the six pending writes per cycle. The bank is known from the address.
   - A write activates only the bits of its masked slices. Other values
     sharing the register are untouched.
   - Writes aimed at the same bank are serialised. The stage accepts a new set
     of results only when all of its pending writes are done.

A result reaches the banks after at least three edges: lookup, truncation and
write. Reads and writes run in parallel; banks have one read and one write port.

The design does not forward results, and it does not detect a read issued
before a pending write of the same register. As in a stock GPU, the scoreboard
in front of dispatch must keep dependent instructions apart for long enough.

## Arbitration

`bank_arbiter` is used three times:

- source table lookups (16 CUs × 3 operands);
- register reads (16 CUs × 6 parts);
- register writes (1 requester × 6 writes).

Each requester may ask for several banks at once. Each cycle the arbiter
visits the banks, starting from a bank that rotates every cycle. At each bank it
grants the first requester, in round-robin order, that still lacks a grant.
Pointers advance past each winner.

The result is a *maximal* matching: no bank is left idle that could have been
served without undoing a grant. It is not always a *maximum* matching. This is
the simplest allocator that serves many banks per cycle while respecting the
one-operand-per-CU limit of the crossbar.

## Modules

| module | role |
|---|---|
| `sdc_pkg` | constants, entry/instruction types, popcount and format helpers |
| `sdc_regfile_top` | the whole register file and operand collector |
| `collector_unit` | one warp instruction's operands, lookups, part reads, OR merge |
| `src_indirection_table` | banked table with its lookup arbiter |
| `dst_indirection_table` | table copy for writes, with conflict buffer |
| `it_storage` | 256 × 32-bit table in 16 banks, registered read, config write |
| `bank_arbiter` | request-to-bank allocator described above |
| `rf_bank` | 64 × 1024-bit bank, registered read, slice-masked write |
| `value_extractor`, `tve` | per-bank read realignment |
| `operand_xbar` | bank-to-CU routing |
| `issue_stage` | picks two ready CUs, converts, registers for execution |
| `value_converter`, `tvc` | narrow float → single precision |
| `value_truncator`, `tvt` | single precision → narrow float, slice scatter |

Top-level parameters are as follows. Defaults give the full-size SM, with
1024 warp registers (128 KB).

| parameter | default | meaning |
|---|---|---|
| `NCU` | 16 | collector units |
| `NTHR` | 32 | threads per warp (datapath width = 32·NTHR) |
| `ROWS` | 64 | warp registers per bank |
| `BUF` | 4 | conflict-buffer entries; this size is this design's own choice |

The other constants are fixed in `sdc_pkg`:

- 16 banks;
- three source operands;
- writeback width three;
- two instructions issued per cycle;
- 256 table entries.

Configuration: `cfg_we/cfg_addr/cfg_data` writes one table entry, in the layout
above, into both tables. It is meant to run before the kernel starts.

## Capacity

The register file holds 1024 warp registers, 32 768 thread registers. Each of
the evaluated kernels fits at least one block without compression:

- register usage of 24 to 60 per thread;
- blocks of 6 to 10 warps;
- the largest block is 60 × 6 = 360 warp registers.

With compression, the gain is in how many blocks fit. For example, a kernel
using 52 registers per thread in blocks of 10 warps takes 520 warp registers,
so one block fits. Packed down to 29 registers it takes 290, so three blocks
fit. The hardware places no limit beyond the 256-entry table and the 48-warp
id space.

## Where this RTL goes beyond or departs from the source description

The published description leaves these points open. The choices here are:

- **Bit layouts.**
  - The entry layout `{r0, r1, m0, m1}` with 8-bit register names.
  - Mask bit *i* = slice *i*.
  - The mapping of physical registers (`wbase + name`).
- **Extractor width.** The extractor multiplexers switch 4-bit nibbles. One
  sentence of the description calls them 32 bits wide. The nibble reading
  agrees with its own figure of the extractor.
- **Register fetch timing.** Register fetch is two cycles here:
  - arbitrate and read the bank;
  - extract and deliver through the crossbar.

  The extractor shares the second cycle with the crossbar transfer, so it adds
  no cycle of its own. This matches the description's intent, which places
  extraction inside the register-read stage.
- **Write pipeline.** The write path is a fixed pipeline: lookup, truncate,
  write. The description models the extra writeback delay in two different
  ways:
  - one cycle, or two with conversion;
  - a pessimistic three cycles for every operand.

  Here conversion is always given its stage.
- **Float edge cases.** Truncation without rounding, and saturation to
  infinity/zero on range overflow.
- **Narrow formats.** A float of one slice (4 bits) is undefined and reads as
  zero.
- **Buffer and handshakes.**
  - The conflict-buffer depth (4) and its oldest-first policy.
  - The `ex_ready` and `wb_ready` handshakes.
  - The round-robin issue choice.
- **CU bookkeeping.** Besides the described per-operand fields (valid,
  signed, convert and location flags, register id, ready, 32-bit indirection
  info, 1024-bit operand), each operand keeps five more state bits: lookup
  issued, and part requested / part arrived for both parts.
- **No thread active mask.** Every write writes all 32 threads. Divergent
  writes would need an extra per-thread mask.
- **Synchronous reset.** Reset is synchronous and active low (`rst_n`). It
  clears control state only; register and table contents are not cleared.

Outside this design: the warp schedulers and scoreboard (the `disp_*` side),
the execution units (`ex_*` and `wb_*`), caches and shared memory, and the
compiler passes that produce the table contents.

## Simulating

Every testbench in `tb/` is self-checking. Each one:

- compares against a model written independently inside the testbench;
- prints `TB_RESULT checks=<n> failures=<m>`;
- contains a watchdog.

Build one with plain Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl \
    rtl/sdc_pkg.sv tb/tb_sdc_regfile_top.sv --top-module tb_sdc_regfile_top
./obj_dir/Vtb_sdc_regfile_top
```

`tb_sdc_regfile_top` runs the top at its default (full) size, with no
parameter overrides. It takes about a minute to build and well under a second
to run. It:

- loads a random table of packed and split operands;
- dispatches random instructions of random warps;
- writes random results through the writeback bus;
- checks every operand delivered to `ex_*` against a shadow copy of the
  architectural values, including float narrowing/widening and sign
  extension;
- checks the 5/6-cycle read latency of isolated operands;
- counts, and requires, each mechanism at least once:
  - split operands;
  - float conversions;
  - sign extension;
  - table conflicts and writeback stalls;
  - read bank conflicts and serialised writes;
  - dual dispatch;
  - execution stalls.

`tb_workload_occupancy` also runs at full size. It covers the register
footprint of eleven evaluated kernels, which use 24 to 60 registers per
thread in blocks of 6 to 10 warps. For each kernel it:

- generates a random packed layout;
- computes how many blocks fit, with and without compression;
- writes and reads back every register of every resident warp.

With random widths averaging 4.5 slices, the packed layout needs about 60 % of
the original registers. Occupancy then rises by 1.1 to 3 times.

The block testbenches (`tb_rf_bank`, `tb_bank_arbiter`, `tb_operand_xbar`,
`tb_collector_unit`, `tb_src_indirection_table`, `tb_dst_indirection_table`,
`tb_value_extractor`, `tb_value_converter`, `tb_value_truncator`,
`tb_issue_stage`) cover each unit on its own.

- The extractor, converter and truncator testbenches drive tens of
  thousands of random masks and values, covering every format.
- A few testbenches narrow the warp to two threads to stay fast. The
  per-thread logic is identical.
