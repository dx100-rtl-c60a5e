# DX100 in SystemVerilog: a shared accelerator for bulk indirect memory access

Loops such as `for i: y[i] = A[B[i]]` (gather), `A[B[i]] = x[i]` (scatter) and
`A[B[i]] += x[i]` (histogram-style update) dominate sparse linear algebra,
graph analytics and hash joins. When cores run them, the indices arrive in
program order, so DRAM sees scattered requests. It keeps opening and closing
rows and wastes most of every 64-byte line it fetches. DX100 is a
memory-mapped accelerator shared by the cores. A core hands it a whole *tile*
of iterations, up to 16K at a time. With every address of the tile known in
advance, the accelerator can:

* **reorder** the accesses so that all columns of one DRAM row leave back to
  back, which turns most row misses into row-buffer hits;
* **coalesce** all iterations that touch the same 64-byte line into one line
  request;
* **interleave** requests over channels and bank groups, so that all banks
  work in parallel;
* **route** each line to the cache hierarchy if a copy is already cached, or
  straight to the DRAM controllers if not.

This repository is synthesizable RTL for the accelerator, testbenches for
every block, and an end-to-end test that runs a gather/scatter kernel on the
full-size configuration.

## Programming model

Everything is visible to software as memory (physical addresses):

| Region | Address | Size | Use |
|---|---|---|---|
| Scratchpad data | `0x4_0000_0000` | 2 MB | 32 tiles x 16K 32-bit elements, readable and writable by cores (64-byte lines) |
| Tile sizes | `0x4_0020_0000` | 64 B | 16 bits per tile, read only |
| Tile ready bits | `0x4_0020_0040` | 64 B | 16 bits per tile (bit 0 = ready), read only |
| Registers | `0x4_0020_0080` | 1 KB | 32 x 64-bit scalar registers (loop bounds, strides, scalars) |
| Instruction | `0x4_0020_0480` | 24 B | three 64-bit stores form one 192-bit instruction |
| TLB entries | `0x4_0020_1000` | 2 KB | 256 x 64-bit entries, write only |

Register, size, ready and instruction accesses use the low 64 bits of the
line-wide core data bus. A TLB entry is
`{valid[63], VPN[58:32], PPN[18:0]}` for 2 MB pages.

A program looks like this:

1. Fill the TLB and the registers, and write any input tiles.
2. Send instructions.
3. Poll the ready bits of the tiles it needs.
4. Read the results from the scratchpad, or from memory for stores.

The ready bit of a tile drops when an instruction that uses the tile is
accepted. It returns to 1 when the last instruction using the tile retires.

### Instructions

| Opcode | Meaning (`for` over the tile, `if TC[i]` when conditioned) | Unit |
|---|---|---|
| `SLD`  | `for idx = R[rs1]; idx < R[rs2]; idx += R[rs3]: TD[i++] = BASE[idx]` | Stream |
| `SST`  | same loop, `BASE[idx] = TS[i++]` | Stream |
| `ILD`  | `TD[i] = BASE[TS1[i]]` | Indirect |
| `IST`  | `BASE[TS1[i]] = TS2[i]` | Indirect |
| `IRMW` | `BASE[TS1[i]] = BASE[TS1[i]] OP TS2[i]` | Indirect |
| `ALUV` | `TD[i] = TS1[i] OP TS2[i]` | ALU |
| `ALUS` | `TD[i] = TS1[i] OP R[rs1]` | ALU |
| `RNG`  | `for j = TS1[i] .. TS2[i]-1: TD1[k] = i; TD2[k] = j; k++` | Range Fuser |

The OP field selects one of ADD, SUB, MUL, MIN, MAX, AND, OR, XOR, SHR, SHL,
LT, LE, GT, GE and EQ. Comparisons return 0 or 1, so their results can serve
as condition tiles. The DTYPE field selects u32 or i32. i32 makes MIN, MAX,
SHR, the comparisons and index sign extension signed.

Word 0 of an instruction holds these fields, from bit 0 upwards:

| Field | Bits |
|---|---|
| opcode | 4 |
| dtype | 3 |
| op | 4 |
| td1, td2, ts1, ts2, tc | 5 each |
| tc_en | 1 |
| rs1, rs2, rs3 | 5 each |

Word 1 is BASE and word 2 is reserved. See `instr_t` in `rtl/dx100_pkg.sv`.

## How instructions flow: the controller and the finish bits

`dx100_controller` assembles an instruction from its three stores into a
4-deep queue. It then moves instructions **in order** into an 8-entry
scoreboard. An instruction is *not* dispatched while any of its destination
tiles is used, as source or destination, by an instruction still in the
scoreboard. This single rule removes WAW, WAR and RAW hazards on tiles
without renaming. At dispatch, the instruction's tiles lose their ready bits,
and the coherency agent invalidates any scratchpad lines of those tiles that
cores have cached.

Issue is **out of order**. Each cycle, the oldest scoreboard entry whose unit
(Stream, Indirect, ALU or Range Fuser) is idle issues, unless an older
instruction that writes one of its source tiles has not issued yet. At issue
the controller reads the entry's three registers and clears the destination
tiles. It also marks them *being written*: the `wr_pending` bit of each
destination tile is set.

Consumers do not wait for their producers to finish. The scratchpad keeps a
**finish bit per element**, and every producer sets it as it writes. A
consumer reads a source line together with its finish bits:

* If the element it needs is not finished and the producer is still running
  (`wr_pending`), the consumer reads the line again later.
* If the producer has ended, the consumer ends once its index reaches the
  tile's size. The size is the highest finished element + 1.

So an ILD can gather with the first indices while the SLD that loads them is
still streaming, and an ALU operation can follow the ILD line by line.

An in-place instruction, such as `T5 = T5 + 7`, is a special case. Its tile
is neither cleared nor marked, so the unit reads finished elements. Later
readers of that tile are held until the in-place instruction retires.

A unit's `done` pulse retires its entry. A tile's ready bit is set again when
no remaining entry uses it.

## The Indirect unit: sorting accesses by DRAM location

`dx100_indirect_unit` is the core of the design. It alternates two phases.

**Fill** handles one iteration per cycle. The unit reads the condition and
index lines (TC, TS1 and, for IST/IRMW, TS2) through its scratchpad port. It
forms `BASE + 4*idx`, translates it, and splits the physical address into DRAM
coordinates. The mapping used here is:

| Field | Physical address bits |
|---|---|
| word offset WO | `pa[5:2]` |
| channel | `pa[6]` |
| bank group | `pa[8:7]` |
| bank | `pa[10:9]` |
| column CO | `pa[17:11]` |
| row RO | `pa[33:18]` |

Channel, bank group and bank select one of **32 Row Table slices**, one per
bank. Each slice (`dx100_row_table_slice`) has two parts:

* a CAM of 64 rows, each `{valid, sent, RO}`;
* for each row, 8 columns, each `{valid, sent, H, CO, tail i}`.

The access looks up its row and column.

* **A column already exists.** The access *coalesces*: it becomes the
  column's new tail. The **Word Table** (`dx100_word_table`, one entry per
  iteration: `{valid, WO, previous i}`) links it to the previous tail. All
  iterations that touch one line thus form a linked list, and the line is
  fetched once.
* **The column is new.** It records the iteration and the **H bit**. H is
  the directory's answer to whether the line is cached anywhere (the
  `snoop_*` port).
* **The slice has no free row, or the row has no free column.** The fill
  stops and a drain begins. The `stat_ind_drains` counter counts these.

An iteration enters only once all its source elements are finished. As a
result, returning lines never wait for a producer. The next section explains
why this matters.

**Drain.** Each slice offers one unsent column at a time, and stays on the
same row until all its columns have left, so a row's requests leave back to
back. `dx100_request_generator` takes one offer per cycle in round-robin
order over the slice number. The channel is the slice number's lowest bit and
the bank group the next two, so consecutive requests alternate channels, then
bank groups. A column with H=1 is requested through the cache. A column with
H=0 goes straight to the memory controllers.

Each returning line finds its column by address. The unit then walks the
column's list from the tail, one word per cycle:

* **ILD** writes each word to `TD[i]` and sets its finish bit.
* **IST** merges `TS2[i]` into the line. When several iterations store to the
  same word, the latest iteration wins: the walk starts at the tail and keeps
  the first write it sees.
* **IRMW** applies `OP` for every iteration in the list. Because the
  updates reach a word in DRAM order rather than program order, only
  associative and commutative operations are allowed (ADD, MUL, MIN, MAX,
  AND, OR, XOR). An assertion checks this at issue.

For IST and IRMW the modified line is written back on the same path it came
from. When every slice is empty, the fill resumes where it stopped. Because
of the linked lists, the cost of a tile is set by the number of *distinct*
lines it touches, not by the number of iterations.

### Why a line must never wait

The cache interface delivers responses in order, and the Stream and Indirect
units share it. Suppose one unit held a returned line while waiting for a
tile that another unit fills from memory. The responses that unit needs
would sit behind the held line, and both units would stop for good.

Both memory units therefore accept an iteration only once its inputs are
finished:

* The Indirect unit checks TC, TS1 and TS2 at fill time.
* The Stream unit checks TS before an SST word enters its Request Table.

The end-to-end test reproduces the deadlock that this rule prevents.

## The Stream unit

`dx100_stream_unit` runs the strided loop, one iteration per cycle.
Consecutive iterations that land in the same 64-byte line share one entry of
a **128-entry Request Table**. The entry records, for each word of the line,
the iteration it serves. An entry closes when the loop leaves the line. It is
then translated, tagged with its entry number and sent to the cache.

When the line returns, the **word modifier** walks the entry's words, one per
cycle:

* **SLD** writes them to `TD[i]`.
* **SST** reads `TS[i]` into the line and writes the line back.

A unit-stride SLD of N elements therefore makes N/16 requests.

## ALU and Range Fuser

`dx100_alu` has 16 lanes, one scratchpad line per group. It reads the
condition line, then the TS1 line, then (ALUV only) the TS2 line. It checks
the finish bits and writes 16 results in one cycle. A group takes 3 to 4
cycles when the port is free. Elements whose condition is 0 get 0.

`dx100_range_fuser` flattens many short inner loops, such as a frontier's
neighbour lists in BFS, into two flat tiles `(i, j)`. Those tiles then feed
ordinary stream and indirect instructions. It emits one pair every two
cycles and stops when the output tiles are full.

## Scratchpad

`dx100_scratchpad` holds 32 tiles of 16K 32-bit elements (2 MB) and has four
ports.

| Port | User |
|---|---|
| 0 | core interface |
| 1 | Stream unit |
| 2 | Indirect unit |
| 3 | ALU, with the Range Fuser when the ALU does not use it |

Each port reads or writes one 16-word line per cycle, with per-word write
and finish masks. Reads are combinational.

Data lives in a line-wide memory with word write enables. Finish bits live in
a second memory, 16 bits per line. Each finish line also has a valid bit
in flip-flops. Clearing a whole tile at issue takes one cycle: the valid
bits of its lines drop. A line whose valid bit is low reads as
all-unfinished, and its first write after the clear rewrites the whole mask
and sets the bit. Both arrays can therefore be SRAM macros with bit write
enables.

Each tile also has a 16-bit size (the highest finished element + 1) and a
ready bit.

## Interfaces, translation and coherency

`dx100_interface` has three parts.

* The **Core interface** decodes the memory map. It answers reads one cycle
  later and holds instruction stores while the queue is full.
* The **TLB** (`dx100_tlb`) has 256 fully associative entries for 2 MB
  pages, with a lookup port for each memory unit. A miss sets the sticky
  `tlb_miss` output; there is no page walker.
* The **Cache and Memory interfaces** route requests:
  * Stream requests always go to the cache.
  * Indirect requests go to the cache or to memory according to their H bit,
    and have priority at the cache port.
  * Responses return by tag. Tag bit 7 marks the Indirect unit.

`dx100_coherency_agent` keeps one bit per scratchpad line that a core has
read. Cores may cache scratchpad lines. When an instruction that uses a tile
is dispatched, the agent scans that tile 32 lines per cycle. It sends a
back-invalidation (`inv_valid`/`inv_addr`) for each marked line. Dispatch
waits until the scan is over.

## Top level and parameters

`dx100` (`rtl/dx100.sv`) connects all the blocks. Its ports are plain
valid/ready signals and structs from `dx100_pkg`:

* the core port;
* a cache port and a DRAM port, each carrying 64-byte line requests and
  responses;
* the directory snoop;
* back-invalidations;
* `tlb_miss`, `idle`, and five statistics counters.

| Parameter | Default | Meaning |
|---|---|---|
| `NTILES`, `TILE` | 32, 16384 | tiles and elements per tile |
| `NREGS` | 32 | scalar registers |
| `LANES` | 16 | ALU lanes |
| `SB_ENTRIES` | 8 | scoreboard entries (this design's choice) |
| `RT_ENTRIES` | 128 | Stream Request Table entries |
| `NSLICES`, `ROWS`, `COLS` | 32, 64, 8 | Row Table slices, rows per slice, columns per row |
| `TLB_ENTRIES` | 256 | TLB entries |

The defaults are the configuration the design was described with. The only
exception is the scoreboard size, which was not given and was chosen here.

## Where this RTL departs from the original description, and its limits

* **Element types.** Only 32-bit elements (u32, i32) exist. The f32, u64,
  i64 and f64 types are decoded but computed as u32. Floating-point kernels
  (PageRank, CG, UME gradients) therefore cannot run. The ALU and both
  memory units are incomplete on this point.
* **Indirect unit phases.** The fill and drain phases do not overlap. A
  drain empties every slice before the fill resumes.
* **Choices made here.** The following were not specified and were chosen
  for this design:
  * the DRAM address mapping above;
  * the instruction bit layout;
  * the TLB window and entry format;
  * the line-wide access widths;
  * the arbitration between units sharing a port;
  * writing 0 for elements whose condition is false;
  * "latest iteration wins" for colliding IST stores.
* **Outside the design.** The cores, caches, network-on-chip, directory and
  DRAM controllers are not part of the design. They appear only as ports, and
  in the testbenches as a behavioural memory model.
* **Synthesis size.** The full-size top is large: 32 Row Table slices of
  64x8 entries, a 2 MB scratchpad and a 16K-entry Word Table. Coarse
  synthesis of the whole top takes longer than ten minutes, so it has no
  measured cell count. Every module passes lint and elaboration at its
  default size.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_dx100_scratchpad` | masks, finish bits, sizes, tile clear, ready bits |
| `tb_dx100_regfile`, `tb_dx100_tlb`, `tb_dx100_word_table` | storage and lookup |
| `tb_dx100_request_generator` | round-robin order, channel and bank-group interleaving, back-pressure |
| `tb_dx100_row_table_slice` | coalescing, tails, full slice, one row at a time, response lookup (4x2 table) |
| `tb_dx100_alu` | all ops and both signednesses, conditions, throughput in cycles, waiting on a running producer |
| `tb_dx100_range_fuser` | pairs against a reference loop |
| `tb_dx100_controller` | dispatch hazards, out-of-order issue, readers held behind writers, in-place updates, queue back-pressure |
| `tb_dx100_coherency_agent` | marking, scan, invalidation addresses |
| `tb_dx100_interface` | memory map, TLB, routing by H bit and by tag |
| `tb_dx100_stream_unit` | SLD/SST data, strides and conditions, one request per line |
| `tb_dx100_indirect_unit` | ILD/IST/IRMW data, see below |
| `tb_dx100` | the whole accelerator at full size, see below |

`tb_dx100_indirect_unit` checks:

* ILD, IST and IRMW results against a reference;
* exactly one request per distinct line;
* H routing of every request;
* forced drains with a small 4x2 table;
* row-buffer hits at least as many as in program order;
* a cycle budget.

The memory side of the unit and system tests is `tb/tb_mem_model.sv`. It has
a fixed latency and random back-pressure, and serves both the cache port and
the DRAM port from one store. Memory never written holds `(address/4)*3 + 1`,
so expected values can be computed without preloading. The model counts
row-buffer hits per bank.

`tb_dx100` runs with **every parameter at its default**. It drives only the
core port, and runs this ten-instruction kernel on 4096 random indices spread
over 64 MB:

1. SLD the indices.
2. ILD a gather.
3. ALUS add a scalar.
4. ALUS make a comparison into a condition tile.
5. Conditional IST.
6. IRMW histogram over 256 bins.
7. SST.
8. RNG.
9. A second SLD into a tile that is still in use.
10. An in-place ALUS.

It then polls the ready bits and checks every result. It also counts each
mechanism and fails if any never occurs:

* coalescing;
* forced drains;
* cache-routed and DRAM-routed requests;
* row-buffer hits;
* a dispatch held by tile reuse;
* a consumer issued behind a running producer;
* a back-invalidation;
* ready polling.

It takes about 38K cycles and about 1.5 minutes to build and run with
Verilator. Every block's testbench was also run against a deliberately broken
copy of the block, and each one detected the fault.

To run a test with plain Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb rtl/dx100_pkg.sv tb/tb_dx100.sv \
          --top-module tb_dx100 -o sim && ./obj_dir/sim
```

Replace `tb_dx100` with any other testbench name. Lint a module with
`verilator --lint-only -Wall -Irtl rtl/dx100_pkg.sv rtl/<module>.sv`.

### Remaining lint warnings

* Unused bits of wide structs, such as the unused fields of an instruction
  in a unit that does not need them.
* Unused bits in the address decode.
* `SYNCASYNCNET` on `rst_n`. Flip-flops use an asynchronous reset, while the
  assertions sample `rst_n` synchronously in `disable iff`.
* `WIDTHCONCAT` on the one-line reset of the 16K-bit Word Table valid vector
  and the 32K-bit coherency vector.

None of these indicates a circuit fault.
