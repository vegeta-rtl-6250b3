# VEGETA-S-2-2: a sparse/dense tile-multiply engine for a CPU core

A CPU matrix engine of the AMX kind multiplies 1 KB tiles held in tile registers. Neural
network weights are often pruned to *N:M structured sparsity*: in every block of M = 4
consecutive weights of a row, at most N are non-zero. A dense engine spends MACs on those
zeros. This engine skips them. The weight tile A is stored compressed: its non-zero values,
plus a 2-bit index per value that gives the value's position inside its block. Each MAC picks,
from a block of four input elements, the one element its weight's index points at.

Because of that, one 1 KB register of non-zeros stands for a 16 x 32 dense tile (4:4), a
16 x 64 tile at 2:4, or a 16 x 128 tile at 1:4. Every output element always costs 32 useful
MACs. The same array and the same 16-cycle issue rate therefore do 2x or 4x the dense-equivalent
work on sparse weights. A fourth mode, *row-wise N:4*, lets every row of A choose its own
pattern.

The RTL is the VEGETA-S-2-2 configuration:

| quantity | value |
|---|---|
| array | 16 rows x 8 columns of SPEs |
| SPE | 2 SPUs (broadcast factor α = 2) |
| SPU | 2 MAC lanes (reduction factor β = 2) |
| MACs | 512 |
| block size M | 4 |
| operands / accumulator | BF16 / FP32 |
| tile registers | 8 x 1 KB (16 rows of 64 B) |
| metadata registers | 8 x 128 B (16 rows of 8 B) |

## Instructions and registers

| instruction | operation |
|---|---|
| `TILE_LOAD_T/U/V dst, addr, stride` | 16 / 32 / 64 rows of 64 B into a treg / ureg / vreg |
| `TILE_LOAD_M dst, addr` | 128 B of metadata into an mreg |
| `TILE_STORE_T src, addr, stride` | 16 rows out of a treg |
| `TILE_GEMM c, a, b` | C(16x16 FP32) += A(16x32) B(32x16), dense |
| `TILE_SPMM_U c, a, b(ureg), m` | C += A(16x64, 2:4) B(64x16) |
| `TILE_SPMM_V c, a, b(vreg), m` | C += A(16x128, 1:4) B(128x16) |
| `TILE_SPMM_R c(ureg), a, b(ureg), m, rowcfg` | C(Rx16) += A(Rx64, row-wise N:4) B(64x16), 8 ≤ R ≤ 32 |

A ureg k is tregs 2k and 2k+1, and a vreg k is tregs 4k to 4k+3. Inside the unit the 8 KB of
tile registers are 128 rows of 512 bits (`vegeta_tile_regfile`), and the metadata registers
are 128 rows of 64 bits.

Operand layout, which software must follow:

* **A, tile-wise.** Row r of the treg holds the 32 non-zeros of A row r in order, BF16 element e
  at bits 16e. Row r of the mreg holds the matching 2-bit positions, index e at bits 2e.
  * At 2:4, non-zero e belongs to block e/2. At 1:4 it belongs to block e.
  * A dense A needs no metadata.
  * A block with fewer non-zeros than its pattern allows is padded with zero values at unused
    positions.
* **B** is stored transposed: column j of B is a run of consecutive register rows.
  * treg: 1 row (32 elements).
  * ureg: 2 rows (64 elements).
  * vreg: 4 rows (128 elements).
* **C** row r is register row r: 16 FP32 values, column j at bits 32j.
* **Memory:** every register row is one 64 B line at `addr + i*stride`. The two 64 B lines of a
  metadata load fill eight 8 B metadata rows each.

## How the array works

The array is weight stationary. Before a multiply, each SPU is loaded with its weights:

* SPU column r (SPE column r/2, SPU r%2) holds row r of A.
* In array row p, lane l holds non-zero number 2p+l of that row.

So a column of 16 SPUs x 2 lanes covers the 32 non-zeros of one A row. The weights enter from
the north over 16 cycles, one array row per cycle, skewed by one cycle per column.

Column j of B then streams in from the west. Array row p receives the input elements of the
blocks that its weights need. The *input selector* of that row hands each of the two MAC lanes
a block of four elements:

| mode | what row p receives | lane 0 gets | lane 1 gets |
|---|---|---|---|
| 4:4 | elements 2p, 2p+1 | element 2p (index 0) | element 2p+1 (index 0) |
| 2:4 | block p | block p | block p (same) |
| 1:4 | blocks 2p and 2p+1 | block 2p | block 2p+1 |

Each lane's 4-to-1 mux then takes the element at its weight's index, and the MAC adds the
product to the partial sum arriving from the north. The two SPUs of an SPE see the same input
in the same cycle (broadcast). One register per SPE passes it east (`vegeta_spe`).

Partial sums move one SPE south per cycle:

* C[r][j] enters the top of lane 0 of SPU column r.
* Lane 1 starts from zero.
* Below the last row, one adder per SPU adds the two lanes (`vegeta_reduction_unit`). That adds
  log2 β = 1 cycle.

Column j enters array row p at cycle j + p and SPE column c one cycle per column later. Element
C[r][j] is read at cycle j + c, where c = r/2, and written back N_ROWS + 1 = 17 cycles after it
was read.

### Row-wise N:4

In row-wise mode the four MAC lanes of one SPE column (two SPUs) form a *group*. There are 8
groups, and each group takes one of:

* one 4:4 row: all four lanes are summed into one output (the SPE acts as SPE-1-4);
* two 2:4 rows: lanes are summed in pairs (SPE-2-2);
* four 1:4 rows: each lane is its own output (SPE-4-1).

A 64-element row costs 16 array rows x 4/N lanes, so every group is always full. An A tile with
N₄ dense, N₂ half-sparse and N₁ quarter-sparse rows needs N₄ + N₂/2 + N₁/4 = 8 groups. Every row
sees block p of B in array row p, exactly as at 2:4.

The group reduction therefore needs a second adder row after the per-SPU adders. The pattern
of every group travels with the data. `rowcfg` gives a 2-bit code per A row (0 = 4:4, 1 = 2:4,
2 = 1:4, 3 = no more rows). `vegeta_rowwise_mapper` walks the rows and assigns them to groups.
It flags a tile whose rows that share a group have different patterns, or whose rows do not fit
in 8 groups. Rows of equal pattern must come in runs that fill whole groups; a DMA engine, which
is not part of this RTL, can reorder rows to make that so.

Row-wise register layout:

* Group g's 64 weights sit in A register rows 2g and 2g+1. Weight number e = 4p + lane is the
  weight of array row p and group lane `lane` (0-3); it is stored in row 2g + e/32 at element
  e%32. The metadata rows match.
* For a 2:4 pair, lanes 0-1 carry the first row and lanes 2-3 the second. For 1:4, lane k carries
  row base+k.
* C row k of the group's output is register row (C ureg base) + (first A row of the group) + k.

## Pipelining, output forwarding and the scheduler

Each multiply passes through fixed-length stages:

| stage | what happens | cycles |
|---|---|---|
| WL | weight load | 16 |
| FF | feed first: B and C enter the top-left SPE | 16 (one per column of B) |
| FS | feed second: the skewed rows still take input | 15 |
| DR | drain the columns | 8 |
| reduction | tile-wise / row-wise | 1 / 2 |

Several instructions can be in the array at once, provided no two are in the same stage.
`vegeta_scheduler` enforces this with two start times:

* **WL** starts when the previous WL is over and the weight bank it will write is free. Every SPU
  has two weight banks, and a bank tag travels with each input so that a MAC multiplies with the
  weights of its own instruction. A bank is free once the instruction that used it has fed all
  its columns.
* **FF** starts 16 cycles after its own WL and at least 16 cycles after the previous FF.

So independent instructions issue every 16 cycles, and all 512 MACs are busy.

*Output forwarding* handles two back-to-back multiplies into the same C tile. Without it, the
second must wait until the first has written its last element (40 cycles after the first FF).
But C elements are written back in the same order they are read, 17 cycles later. So the second
instruction may start feeding 17 cycles after the first. Each element it reads is then written
by the first instruction in that very cycle. The engine compares every C read with the
writeback bus of the same cycle and takes the written value (the *bypass*).

Counted from the first instruction's WL, the dependent FF starts at 2 x 16 + 1 = 33. Row-wise
multiplies do not forward, because their C rows are not read in write order; they wait for
completion. An instruction whose A or B register is still being written by an earlier one is
held before WL.

The scheduler counts four events: dependency stalls, forwarded starts, overlapped starts and
bank stalls. The engine counts bypass hits and row-wise configuration errors.

## The tile unit around the engine

`vegeta_top` connects the register file, `vegeta_lsu` and `vegeta_engine` behind an instruction
port (`instr_t`, one decoded instruction per `instr_valid && instr_ready`) and a 64 B memory
port.

The LSU splits loads and stores into line requests. Requests use a `req_valid/req_ready`
handshake. Read data comes back in order on `rsp_valid` and cannot be refused.

A real core renames tile registers and overlaps memory and matrix instructions. Here the host
core's front end, renamer, ROB and load/store queue are outside the design, so the top keeps
order simply:

* a memory instruction waits until the engine is idle;
* a multiply waits until the LSU is idle.

Multiplies still pipeline and forward among themselves.

## Numerics

* The product of two BF16 values is exact in FP32 (8-bit × 8-bit significands).
* Each MAC rounds the sum once, to nearest even (`vegeta_bf16_mul`, `vegeta_fp32_add`).
* Subnormals are flushed to zero; infinities and NaN behave as in IEEE 754.
* The final lane sums are further FP32 additions. The order of the additions is fixed by the
  array: lane 0 accumulates the even non-zeros from C downward, lane 1 the odd ones from zero,
  and then the lanes are added.

## Files

| file | contents |
|---|---|
| `rtl/vegeta_pkg.sv` | types, sizes, opcodes, operand structs |
| `rtl/vegeta_bf16_mul.sv`, `rtl/vegeta_fp32_add.sv`, `rtl/vegeta_mac.sv` | arithmetic |
| `rtl/vegeta_spu.sv`, `rtl/vegeta_spe.sv`, `rtl/vegeta_input_selector.sv`, `rtl/vegeta_reduction_unit.sv`, `rtl/vegeta_array.sv` | the array |
| `rtl/vegeta_rowwise_mapper.sv` | row-wise group mapping |
| `rtl/vegeta_scheduler.sv` | stage scheduler, output forwarding |
| `rtl/vegeta_engine.sv` | sequencers for weights, inputs and C with the bypass; writeback |
| `rtl/vegeta_tile_regfile.sv`, `rtl/vegeta_lsu.sv`, `rtl/vegeta_top.sv` | registers, load/store, top |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_vegeta_util_pkg.sv` (float helpers) |

## Verification

Every testbench drives its module with random stimulus. It compares against a reference
written from the definition, not from the RTL, and ends with a line
`TB_RESULT checks=<n> failures=<n>`.

The MAC test compares against a double-precision model with its own rounding. The larger
tests use small integer operands. Every FP32 result is then exact in any addition order, so
their reference is a plain integer matrix product.

`tb_vegeta_top` runs the full-size design with no parameter overrides. It drives the unit
through a behavioural memory: loads, stores, all four multiply modes (row-wise with all three
row patterns mixed in one tile), two pairs of dependent GEMMs and dependent 2:4 and row-wise
pairs. It checks all 1,536 result elements. It also counts pipelining overlap, forwarded starts,
bypass hits, dependency stalls, bank stalls and each mode, and fails if any count is zero. The
dependent GEMM must start feeding 17 cycles after its producer.

`tb_vegeta_workload_gemm` runs a layer GEMM the way software tiles it, through the same
full-size unit. The slice is C(32x32) += A(32x128, 2:4) x B(128x32): four output tiles, each
accumulated over two K steps. Only the loop trip counts differ from a full transformer layer.

`tb_vegeta_scheduler` checks the exact start distances:

* 16 cycles between independent instructions;
* 17 with forwarding;
* 40 without it;
* 41 for row-wise.

To run a test with Verilator 5:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb --top-module tb_vegeta_top \
    rtl/vegeta_pkg.sv tb/tb_vegeta_util_pkg.sv -y rtl +libext+.sv tb/tb_vegeta_top.sv
./obj_dir/Vtb_vegeta_top
```

The top-level test builds in under a minute and runs in well under a second.

## Workloads

The engine runs one 16 x 16 output tile per instruction. A layer is tiled in software: a dense
GEMM of size M x N x K needs (M/16)(N/16)(K/32) TILE_GEMMs, 2:4 needs half as many SPMM_U, and
1:4 a quarter as many SPMM_V. At 16 cycles each, that is MACs / 512 cycles dense. For example,
a 512 x 768 x 768 GEMM (a BERT-base projection over 512 tokens) is 32 x 48 x 24 = 36,864 tile
GEMMs, or 589,824 cycles. Any layer fits,
because one instruction needs at most 6 KB of the 8 KB of registers.

## Where this design goes beyond or departs from the description it follows

Not described, and chosen here:

* the instruction encoding and memory port;
* the double weight banks with a bank tag;
* the bypass as a same-cycle compare against the writeback bus;
* the register stage inside the reduction units;
* the row-wise register layout and the 2-bit row-pattern codes;
* `rowcfg` travelling with the instruction instead of being held in a register;
* round to nearest even with flush to zero.

Simplified:

* The host core is not modelled: no register renaming, and memory and multiply instructions do
  not overlap.
* Row reordering for row-wise sparsity is left to software or a DMA engine.
* The scheduler tracks at most four instructions in flight and two waiting to feed.

Not built: the CPU pipeline around the unit, the caches and memory system, and the DMA
reordering engine.
