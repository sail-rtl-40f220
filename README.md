# SAIL: lookup-table GEMV next to the last-level cache

Token generation in a quantized LLM is dominated by matrix–vector products
(GEMV) whose weights are 2 to 8 bits wide. A CPU spends most of that time
moving weights, and its vector unit does not handle odd precisions
efficiently. This design adds a small compute SRAM (a *C-SRAM*) beside every
slice of a shared last-level cache (LLC). The C-SRAM computes GEMV with lookup
tables, for any weight precision, while the cache slice next to it acts as a
ping-pong buffer for the weight tiles arriving from DRAM.

The arithmetic works as follows. Take `NBW` consecutive weight rows
`w0 … w(NBW-1)` of the matrix. For every output column the C-SRAM precomputes
all `2^NBW` subset sums of the `NBW` weights in that column. This is the
lookup table (LUT). The activations are then sent in bit-serially. For
activation bit `k` of the `NBW` inputs that belong to these rows, the `NBW`
bits form a *pattern* `p`. Every column then does one step:
`acc += LUT[p] << k`. One LUT is reused for all 8 activation bits and all
users of a batch, so a batch of users shares each weight fetch. The cost of
building the table is paid once per group of rows.

The RTL here implements the LLC-side part of the system in synthesizable
SystemVerilog:

* the instruction decoder;
* the address hasher that spreads a tile over two slices;
* the slices' data arrays, with their two ping-pong halves;
* the C-SRAM: a bitline-computing array, a transposer and a control unit;
* the column-parallel integer-to-float converter;
* the pattern reuse table;
* the data feeding module (DFM) that runs one instruction;
* a top that instantiates 16 such threads.

The cores, their private caches, the NoC and DRAM are not included. Their
traffic appears as ports of the top.

## Organisation

```
sail_top  (N_THREADS = 16)
└─ per thread
   ├─ addr_hasher        weight fill address -> (slice, line)
   ├─ llc_slice  x2      2 halves x 8192 lines x 512 bit = 1 MB each
   ├─ dfm                runs lutmm_1k; holds the input vectors; prt inside
   │   └─ prt            32-entry fully associative pattern table
   └─ csram      x2      one beside each slice, 512-bit link
       ├─ transposer     512-bit block -> bit-planes
       ├─ rcu            command -> row operations
       ├─ bc_sram        256 x 512 bitcells, two row decoders
       │   └─ sa_logic   per-column AND/NOR sensing, XOR, carry latch
       └─ int2fp         512-lane integer -> FP32 converter
```

Sixteen threads use 32 C-SRAMs beside 32 one-megabyte slices. That is a 32 MB
LLC with 512 KB of added compute SRAM. `sail_pkg` holds the shared constants,
the instruction struct and the command types.

## The instruction

`lutmm_1k` computes a `[1,1024] x [1024,1024]` tile of a larger GEMV for a
whole batch:

| bits    | field  | meaning                                                      |
|---------|--------|--------------------------------------------------------------|
| [31:27] | loc    | tile position: the tile starts at column `loc*1024`          |
| [26:25] | sc     | matrix width is `1024 << sc`                                 |
| [24:20] | rw     | register with the weight matrix base address                 |
| [19:15] | ri     | register with the input base address                         |
| [14:12] | ql     | weight precision minus one (`w_bits = ql + 1`)               |
| [11:7]  | rd     | register with the result base address                        |
| [6:0]   | opcode | `7'b0001011` (custom-0)                                      |

`lutmm_decoder` computes `tile_addr = rw + loc*1024` and
`row_stride = 1024 << sc`. It can do this because every weight sits in one
byte in memory, with its value in the low `w_bits` bits. The fill side of the
system uses these two values to fetch the tile. Batch element `b` reads its
input vector, 1024 unsigned 8-bit activations, from `ri + b*1024`. It writes
its FP32 results to `rd + 4*(b*out_len + column)`. Larger products are made of
repeated instructions, and the core adds their partial results. The
KV-cache mapping (below) is selected by a separate `kv_mode` bit per thread,
because the instruction has no field for it.

## One thread, step by step

The `dfm` is the controller. For one instruction it does the following:

1. **Inputs.** It fetches the `BATCH` input vectors from the data cache
   (`in_req_*`/`in_rsp_*`), 64 activations per 512-bit block, into a local
   buffer.
2. **Wait for weights.** It waits until the ping-pong half it computes from is
   full. The fill side writes tiles into the other half (`fill_*`, with
   `fill_done` marking a complete tile). Every cycle spent waiting is a
   *stall* and is counted in `cnt_stall`.
3. **Clear.** It clears the accumulators of both C-SRAMs.
4. **Per group of `NBW` weight rows** (`ceil(rows/NBW)` groups):
   * It reads the group's rows from the slices, 64 weights per cycle. Each
     block goes to its C-SRAM as `LOADW`, which writes one single-weight LUT
     entry.
   * `BUILD` then fills in the multi-weight entries.
   * Then, for every batch element `b` and activation bit `k = 0..7`, it
     forms the pattern from bit `k` of the group's activations. The first row
     of the group gives the pattern's most significant bit. It sends
     `ACCUM(b, p, k)` to both C-SRAMs.
   * A pattern of zero sends nothing, since LUT entry 0 is zero. This is
     counted in `cnt_zero_skip`.
5. **Results.** For every batch element it does the following:
   * reads the accumulators out of both C-SRAMs (`READ`);
   * in KV mode, adds the two C-SRAMs' partial sums;
   * sends the integers back to the C-SRAMs' converters;
   * streams the FP32 results out, 8 floats per 32-byte beat, under
     `out_valid`/`out_ready`.

   Dequantization (scale and offset) is left to the core's vector unit.
6. **Release.** It marks the half empty and swaps the halves.

Commands go to both C-SRAMs at once. Each C-SRAM has its own ready signal, and
the DFM moves on only when both have accepted.

### Two mappings of a tile

* **Row mode** (Q/K/V projections, feed-forward layers). The tile is
  `1024 x 1024`. C-SRAM 0 holds output columns 0–511 of all 1024 rows, and
  C-SRAM 1 holds columns 512–1023. Each half-row of 512 bytes is one 512-byte
  chunk in one slice.
* **KV mode** (a vector times a transposed KV-cache matrix). The tile is
  `1024 x 512` with 512-byte rows. The hasher deals consecutive rows
  alternately to the two slices, so C-SRAM `c` holds rows `2r+c` of the same
  512 columns. Each C-SRAM produces a partial sum, and the DFM adds the two.
  The tile shape and the row interleave are choices of this design.

### The address hasher

`addr_hasher` keeps the low 9 bits of the byte offset. The next bit picks the
slice, so 512-byte chunks alternate between the two slices of the thread. The
remaining bits and the 64-byte block number give the line inside the slice
half. This way a C-SRAM always finds its weights in the slice beside it. The
fill side writes through the hasher. The DFM's reads use the same formula, so
the two agree by construction.

## Inside a C-SRAM

### Row map of the array

Every one of the 512 bitlines (columns) is one output neuron. The 256 rows
of the column hold, bit-serially, LSB in the lowest row:

```
rows  (e-1)*10 .. (e-1)*10+9        LUT entry e, e = 1 .. 2^NBW-1   (10 bits each)
rows  30 + b*25 .. 30 + b*25+24     accumulator of batch element b  (25 bits each)
```

This applies to `NBW = 2` and `BATCH = 8`. The LUT uses 30 rows and the
accumulators use 200, so 230 of the 256 rows are used.

* **LUT entries.** They are `WMAX + NBW = 10` bits wide. The sum of
  `2^NBW − 1` signed 8-bit weights cannot overflow that width.
* **Accumulators.** They are 25 bits wide, which holds the worst case
  `1024 x 255 x 128` in two's complement. 25 bits is also the widest input
  the float converter accepts.

The C-SRAM has no entry 0. A zero pattern is skipped altogether.

### Commands of the control unit (`rcu`)

| command | work                                                                 | cycles (after accept)     |
|---------|----------------------------------------------------------------------|---------------------------|
| LOADW   | transposer writes 10 bit-planes of 64 weights into a single-weight entry | 11                    |
| BUILD   | multi-weight entries made by in-array addition of smaller entries    | 11 per entry (1 for NBW = 2) |
| CLEAR   | zero all accumulator rows                                            | `BATCH x 25` = 200        |
| ACCUM   | `acc[b] += sext(LUT[p]) << k`, working from row `k` upward           | `25 − k + 1`              |
| READ    | accumulator rows read out one per cycle into `acc_vec`               | 26                        |

One ACCUM is one bit-serial addition over `25 − k` bits plus one cycle to
clear the carry latch. It starts at bit `k` and does not shift any data: the
shift is just the row offset. The LUT operand is sign-extended by reading its
top row again. The testbench of the control unit checks each of these cycle
counts.

### Bitline adder (`bc_sram`, `sa_logic`)

`bc_sram` has two row decoders, so it can activate two wordlines at once.
With both rows `a` and `b` on, the bitline of a column senses `a AND b`, and
the complementary bitline senses `a NOR b`. From these two values the logic
under each column computes:

```
xor   = NOR(and, nor)
sum   = xor ^ C          -> written back to the destination row the same cycle
C    <= and | (xor & C)  when C_EN
```

Together with one cycle to clear `C`, an `n`-bit addition takes `n + 1`
cycles. The array supports these operations, one per cycle:

* a masked row write (the transposer fills 64 columns at a time);
* a registered row read;
* the two-row addition;
* clearing the carry latches.

The bitcells are written as a register array. Precharge and sensing are
modelled by their logic function.

### Transposer

A 512-bit cache block holds 64 weights. The transposer sends out one
bit-plane per cycle, bit `t` of all 64 weights. It produces 10 planes. The
planes at or above `w_bits` repeat the weight's sign bit, so a weight of any
precision from 2 to 8 bits lands in the array as a 10-bit two's-complement
number. The precision handling lives here: nothing else in the C-SRAM depends
on `w_bits`.

### Integer to float (`int2fp`)

Each of the 512 lanes converts a 25-bit signed integer to IEEE-754 single
precision with a sequence that uses only bitwise steps and a small adder.
The steps are:

* **Leading one.** Scan from the top bit down, ORing into a mask `C` that
  becomes all ones from the leading one downward.
* **Exponent.** Count the ones of `C` and add 126 to get the biased exponent.
* **Sign.** Set the sign bit.
* **Mantissa.** Multiply the magnitude by `BitReverse(C + 1)`. This moves the
  leading one to a fixed position, and the bits below it become the mantissa.

All lanes run in lock-step, one step per cycle, so a conversion takes
`3N + 2 = 77` cycles. Three details differ from the published form of the
algorithm:

* The count register is 8 bits and fills exponent bits 30:23.
* The multiplier has no extra left shift, because that shift would place the
  mantissa one position too high.
* The integer is split into sign and magnitude first, and zero gives +0.0.

The converter is a separate unit in each C-SRAM. It does not run as
bit-serial operations inside the array, so its cycle count is not that of an
in-array implementation.

### Pattern reuse table (`prt`)

Each DFM holds a 32-entry, fully associative table. Its 32-bit keys are a
multiplicative hash of the bit position and the patterns. The table has
combinational lookup, round-robin replacement and a flush for each group.
The DFM looks up every broadcast, inserts on a miss, and counts hits.

A hit does **not** skip any work in this design. Every batch element
accumulates in its own rows of the array, so there is no LUT result in the
DFM that a later broadcast could reuse. Treat the table as instrumentation
until a dataflow is chosen in which results pass through the DFM.

## Where this design departs from the published description

* **Activations and weights.** Activations are unsigned 8-bit. Weights are
  signed, 2 to 8 bits, stored one per byte.
* **Not covered by the published text.** These are this design's own choices:
  * the accumulator width and the row map;
  * the command protocol between DFM and C-SRAM;
  * the KV-mode tile shape;
  * the `kv_mode` port;
  * the output address formula;
  * the one-cycle slice read.
* **Pattern reuse table.** It counts reuse but does not bypass work (see
  above).
* **Float converter.** It is a word-level sequencer beside the array, with
  the three corrections listed above.
* **Idle use of the C-SRAM.** Using it as extra cache capacity or for simple
  search primitives when idle is not built.
* **Slices.** A slice is modelled as its data array only: no tags and no
  coherence. Ordinary cache traffic does not pass through it.
* **Batch and NBW limits.** With the row map above, `NBW = 2` allows at most
  9 batch elements, `NBW = 3` allows 7 and `NBW = 4` allows 3. `NBW = 5` does
  not fit in 256 rows. Larger batches must run as several passes.
* **Instruction width limits.** `sc` is two bits, so one instruction can
  address matrices up to 8192 columns wide. Wider matrices must be stored as
  panels.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares the
module's outputs with results computed independently in the testbench. Each
prints `TB_RESULT checks=N failures=M`, and each has a watchdog. `sail_tb_pkg`
provides the reference float conversion and sign extension.

| testbench          | what it checks                                                                            |
|--------------------|-------------------------------------------------------------------------------------------|
| `tb_lutmm_decoder` | field extraction and address arithmetic on random instructions                            |
| `tb_addr_hasher`   | low 9 bits never change the slice, chunks alternate, each slice's lines are dense         |
| `tb_llc_slice`     | both halves, independent read and write, read latency                                     |
| `tb_sa_logic`      | add chains against integer addition, carry enable and clear                               |
| `tb_bc_sram`       | masked writes, reads, multi-bit additions in the array                                    |
| `tb_transposer`    | bit-planes and sign extension for every precision                                         |
| `tb_rcu`           | complete LUT-GEMV on a reduced array against a reference, every command's cycle count     |
| `tb_int2fp`        | results bit-exact against the IEEE-754 bits of a real conversion, and the 3N+2 latency    |
| `tb_csram`         | the composed C-SRAM on random weights and activations                                     |
| `tb_prt`           | hits, misses, replacement, flush                                                          |
| `tb_dfm`           | the DFM inside a one-thread top with `NBW = 3` and a partly empty last group              |
| `tb_sail_top`      | reduced top, end to end (see below)                                                       |
| `tb_sail_full`     | the top with all parameters at their defaults                                             |

### End-to-end tests

`tb_sail_top` plays the parts around the LLC: the fill engine, the data cache
and the core that collects results. It runs two threads on a reduced array
(64 columns, 128-element vectors, batch 2), with three instructions per
thread. The instructions cover both mappings and precisions from 2 to 8 bits.
Every FP32 result is compared with a dot product computed in the testbench.

The test also counts each mechanism and fails if any of them never happens:

* a stall waiting for a tile;
* a tile fill overlapping computation;
* a pattern-table hit;
* a zero-pattern skip;
* row mode and KV mode;
* output back-pressure;
* each weight precision used.

`tb_sail_full` runs the default configuration: 16 threads, 512-column
C-SRAMs, 1024-element vectors, batch 8 and 1 MB slices. Each thread runs one
complete instruction, 8 in row mode and 8 in KV mode, and every result of all
16 threads is checked. One full instruction with batch 8 takes about 0.7
million clock cycles. The run takes about a minute in Verilator.

### Running a test

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/sail_pkg.sv tb/sail_tb_pkg.sv tb/tb_sail_top.sv \
    --top-module tb_sail_top -Mdir obj_tb_sail_top -j 8
./obj_tb_sail_top/Vtb_sail_top
```

Replace the testbench name to run another test. Modules are found through
`-Irtl -Itb`.

## Parameters

| parameter    | default | where                       | meaning                                            |
|--------------|---------|-----------------------------|----------------------------------------------------|
| `N_THREADS`  | 16      | `sail_top`                  | DFM + 2 C-SRAM + 2 slice groups                    |
| `ROWS, COLS` | 256, 512 | `sail_top`, `csram`, `bc_sram` | C-SRAM array size                               |
| `NBW`        | 2       | `sail_top`, `dfm`, `rcu`    | weights per LUT (`2^NBW` entries)                  |
| `BATCH`      | 8       | `sail_top`, `dfm`, `rcu`    | batch elements (accumulators per column)           |
| `VEC`        | 1024    | `sail_top`, `dfm`           | tile height / input length                         |
| `LINES`      | 8192    | `sail_top`, `llc_slice`     | 64-byte lines per slice half                       |
| `ACC_W`      | 25      | `sail_pkg`                  | accumulator width                                  |
| `WMAX`       | 8       | `sail_pkg`                  | widest weight; LUT entries are `WMAX + NBW` bits   |

The reduced tests shrink `COLS`, `VEC`, `BATCH` and `LINES` together. The
hasher's chunk size follows `COLS`, so one C-SRAM row still maps to one
chunk.
