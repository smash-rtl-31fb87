# SMASH Bitmap Management Unit — SystemVerilog RTL

Sparse-matrix kernels spend a large part of their time on *indexing*: finding
where the next non-zero value sits. In CSR that means loading `row_ptr` and
`col_ind` and then following them into the data, a chain of dependent memory
accesses. SMASH replaces those index arrays with a **hierarchy of bitmaps**.
A bit is set when its region of the matrix holds at least one non-zero value.
A small hardware unit beside the core, the **Bitmap Management Unit (BMU)**,
scans those bitmaps and hands the core the `<row, column>` of the next
non-zero block. Software only loops over the packed non-zero values.

This repository holds RTL for the BMU, in the configuration the SMASH paper
sizes in its area estimate:

- 4 groups (one group serves one matrix);
- 3 bitmap levels per group;
- one 256-byte SRAM buffer per level, so 3 KB of bitmap storage in all.

It also holds self-checking testbenches. These encode matrices in software
and run SpMV and SpMM on the unit the way a CPU would.

## 1. The encoding the hardware reads

A matrix of `rows x cols` elements is taken in row-major order as one long
vector. Element `e` sits at row `e / cols`, column `e % cols`.

* **Bitmap-0.** Bit `k` is set if any element in
  `[k*comp(0), (k+1)*comp(0))` is non-zero. Each set bit stands for one
  *NZA block*: `comp(0)` consecutive elements, zeros included. The blocks
  are stored one after another in the Non-Zero values Array (NZA).
* **Bitmap-i, i > 0.** Bit `k` is set if any bit in
  `[k*comp(i), (k+1)*comp(i))` of Bitmap-(i-1) is set.
* The top level covers the whole matrix. Its length is
  `ceil(rows*cols / (comp(0)*...*comp(top)))` bits.

`comp(i)` is the *compression ratio* of level i. It can be any value from 1
to 2048 (the bits in one 256-byte buffer), set separately for each level.

**Only the non-zero blocks are stored.** Take a level below the top. It is
cut into blocks of `comp(i+1)` bits, one block per bit of the level above.
A block is written to memory only if its parent bit is set. Each level
becomes one packed bit stream, and its blocks appear in the same order as
the set bits of the parent level. For example, with ratios 2:1 (Bitmap-2),
4:1 (Bitmap-1) and 4:1 (Bitmap-0), a 64-element matrix whose non-zeros fall
in Bitmap-0 blocks 2, 8 and 10 is stored as three streams:

```
Bitmap-2 stream : 1 1
Bitmap-1 stream : 1 0 | 1 0            (one 2-bit block per Bitmap-2 bit)
Bitmap-0 stream : 0 0 1 0 | 1 0 1 0    (one 4-bit block per set Bitmap-1 bit)
NZA             : block 2 | block 8 | block 10   (4 elements each)
```

In memory each stream starts at an 8-byte-aligned address. Bit `p` of a
stream is bit `63 - p%64` of 64-bit word `p/64`: the first bit is the most
significant bit of its word. The testbenches contain a software encoder that
builds these streams (`tb/tb_smash_pkg.sv`, class `bitmap_enc`).

## 2. How the scanner finds the next block (`bmu_scan_ctrl`)

This is the core of the design. A depth-first walk of the hierarchy visits
every stream strictly from low to high addresses. Each level therefore needs
only a little state:

| per level | meaning |
|---|---|
| `pos` | cursor: next bit of this level's stream to look at |
| `off` | offset of `pos` inside the current block |
| `open` | the current block is valid (false: the walk must climb first) |
| `idx` | offset of the last set bit followed at this level: `index_bit(i)` |
| `win`, `winv` | which 2048-bit window of the stream the buffer holds |

A PBMAP starts at level 0 and repeats one of these steps each cycle:

1. **Block exhausted** (`!open` or `off >= comp(lv+1)`): climb one level.
   If the exhausted level is the top, the matrix has been fully scanned.
   The top ends where `off * prod(comp) >= rows*cols`. PBMAP then reports
   `found = 0`.
2. **Cursor outside the buffered window**: refill. The buffer is loaded with
   the 2048-bit window of the stream that holds `pos`: 32 reads of 64 bits,
   issued back to back, answered in order.
3. **Examine one 64-bit word.** The buffer word holding `pos` is masked to
   the bits of the current block that lie in this word, and a priority
   encoder finds the first set bit.
   * Found at level 0: save its offset and finish the search.
   * Found higher up: save its offset as `idx`, open the child block
     (`off = 0`) and descend. Its bits start at the child stream's cursor.
     Blocks are stored back to back, so no address arithmetic is needed.
   * Nothing found: move the cursor to the end of this word, or to the end
     of the block if that comes first.

Search time depends on the data:

- one cycle for each 64-bit word examined;
- one cycle for each climb or descent;
- 32 memory responses for each refill.

The paper gives no throughput figure. The rule it states is that no ratio may
exceed the buffer size, and this design enforces it with an assertion.

RDBMAP `[mem], buf` sets level `buf` to the stream at `[mem]` and loads its
first window. If `buf` is the top level, the walk restarts: every lower
level is closed. This is what the SpMM use case needs when it points the
unit at a new row.

## 3. From set-bit positions to row and column (`bmu_index_calc`)

When the walk reaches level 0, the saved offsets give the element index of
the first element of the block:

```
Index = sum over i < levels of ( comp(0) * ... * comp(i) ) * index_bit(i)
row   = Index / cols
col   = Index % cols
```

`bmu_config_regs` keeps the products `comp(0)*...*comp(i)` up to date
whenever a ratio is written. The weighted sum is formed in one cycle. A
restoring divider (`bmu_divider`, one quotient bit per cycle) splits the
48-bit index by the column count. From `start` to `done` takes 51 cycles.
The results go to the group's row and column output registers.

## 4. Instruction interface

The CPU port takes one instruction per accepted cycle (`cmd_valid` /
`cmd_ready`, struct `smash_cmd_t` = `{op, grp, a, b}`):

| op | operands | effect |
|---|---|---|
| `OP_MATINFO`  | a = rows, b = cols | set matrix size; clears the level count |
| `OP_BMAPINFO` | a = comp, b = lvl  | set `comp(lvl)`; levels in use = highest lvl + 1 |
| `OP_RDBMAP`   | a = byte address, b = level | point a level at its stream and load the first window |
| `OP_PBMAP`    | — | search for the next non-zero block |
| `OP_RDIND`    | — | answer `{found, row, col}` on `rsp_valid` / `rsp` one cycle later |

The `grp` field picks the group. A group that is loading or searching holds
`cmd_ready` low, so the instruction behind it stalls. RDIND therefore waits
for the PBMAP before it. Groups run independently: software can start PBMAP
on two groups and then read both with RDIND. The SpMV testbench does exactly
that.

After the last block, PBMAP sets `found = 0` and RDIND returns it. This flag
is an addition to the paper's instruction set, which gives software no way to
learn that a matrix is finished.

## 5. Memory port

`m_req_valid / m_req_ready / m_req_addr / m_req_id` is a 64-bit read by byte
address. The response `m_rsp_valid / m_rsp_data / m_rsp_id` must come back in
request order and echo the tag. A round-robin arbiter (`bmu_mem_arbiter`)
shares the port among the four groups. With four requesters, a group that
keeps asking waits at most three grants. The BMU reads only bitmaps. The core
loads the NZA values itself.

## 6. Files

| file | content |
|---|---|
| `rtl/smash_pkg.sv` | constants, instruction enum, command / response / config structs |
| `rtl/smash_bmu.sv` | top: instruction routing, four groups, memory arbiter |
| `rtl/bmu_group.sv` | one group: decode, registers, scanner, index calc, output registers |
| `rtl/bmu_config_regs.sv` | programmable registers (matrix and bitmap parameters) |
| `rtl/bmu_scan_ctrl.sv` | depth-first scanner with its three buffers |
| `rtl/bitmap_buffer.sv` | 256-byte buffer, 32 x 64-bit register array |
| `rtl/bmu_index_calc.sv`, `rtl/bmu_divider.sv` | index formula and divider |
| `rtl/bmu_mem_arbiter.sv` | memory port sharing |
| `tb/tb_*.sv` | one self-checking testbench per block, the workload tests `tb_workload_spmv` and `tb_workload_spmm`, plus `tb_smash_pkg` (software encoder) and `tb_mem_model` (in-order memory with latency and random back-pressure) |

## 7. Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. For
example, the end-to-end test runs at the default parameters and takes about
a second:

```
verilator --binary --timing --assert -Irtl -Itb rtl/smash_pkg.sv rtl/*.sv \
    tb/tb_smash_pkg.sv tb/tb_mem_model.sv tb/tb_smash_bmu.sv \
    --top-module tb_smash_bmu -Mdir obj && obj/Vtb_smash_bmu
```

For the other blocks, change the last testbench file and `--top-module`. The
end-to-end test does the following:

- runs SpMV on two matrices at once (groups 0 and 3, 3-level hierarchies);
- runs SpMM with 1-level bitmaps on groups 1 and 2, merging the two index
  streams;
- compares `y` and `C` with direct products;
- requires that each of these happened at least once:
  - RDIND stalled behind a PBMAP;
  - another instruction stalled on a busy group;
  - a refill in the middle of a search;
  - a climb and a descent;
  - two groups requesting memory in the same cycle;
  - memory back-pressure;
  - the end-of-matrix answer.

The scanner test also rebuilds the 64-element example of section 1 and
checks the streams bit for bit.

`tb_workload_spmv` runs SpMV at the sizes of two inputs the paper evaluates,
with random positions, since the real inputs are not included:

| input | size | bitmap ratios | blocks | BMU cycles per block |
|---|---|---|---|---|
| M1 shape | 20738², 73,916 non-zeros | 64.64.2 | 73,912 | 63 |
| G2 graph shape (one PageRank SpMV) | 317K², 1M edges | 64.64.2 | 999,997 | 65 |

The memory model answers with a 20-cycle latency, and each cycle count
includes the CPU-side handshakes. The G2 run takes about 90 seconds.

`tb_workload_spmm` runs SpMM on the M1 shape: one full row of `C = A*A`.
Group 0 walks the densest row of `A` and group 1 walks each of the 20,738
columns of `A` in turn (1-level bitmaps, ratio 2). The run finds 103
matching blocks, costs about 1,565 BMU cycles per column and takes about
30 seconds. The whole product would take 20,738 times as long.

To change the size, use the parameters of `smash_bmu`: `GROUPS`, `LEVELS`,
`BUF_BYTES`. Operand widths are in `smash_pkg`.

## 8. What follows the paper and what does not

Taken from the paper:

- the bitmap hierarchy, and storing only the non-zero blocks;
- the depth-first walk that saves the set-bit position at each level;
- the index formula and the row/column split;
- the five instructions and their operands;
- groups, each with its own buffers, registers and output registers;
- 4 groups x 3 levels x 256-byte buffers;
- compression ratios of at most 2048:1.

Choices of this design, where the paper is silent:

- The word width (64), operand widths, instruction encoding and all
  handshakes.
- The MSB-first bit order. The paper's software variant finds set bits with
  count-leading-zeros, which points to this order.
- Each buffer holds a 2048-bit window of its stream and is refilled when the
  walk leaves the window. A block that straddles two windows costs two
  loads. The paper limits ratios to the buffer size so that one load covers
  a block. This design needs no alignment rule.
- The search examines one 64-bit word per cycle.
- How many levels are in use follows from the BMAPINFO instructions.
- The `found` flag that marks the end of a matrix.
- Stalling instructions on a busy group.
- The register budget is larger than the paper's 140 bytes. Indices are 48
  bits, and each level has a stream cursor.

The paper's SpMM listing loads A's row bitmap once per row and steps both
groups together. As written, that does not merge two index streams. The
testbench reloads A's row for every column of B and advances whichever side
has the smaller index. This is software, not hardware.

Not built:

- the host CPU and the cache/DRAM hierarchy. They are outside the BMU, and
  `tb_mem_model` stands in for memory.
- the conversion from CSR to the bitmap format. The paper does it in
  software.

Area and timing have not been checked against the paper's CACTI estimate
(at most 0.076% of a core).
