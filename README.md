# FlexiSAGA — a systolic-array GEMM accelerator with seven dense and sparse dataflows

FlexiSAGA multiplies a weight tile by an input tile, `Y = W · X`, on a grid of
processing elements (PEs). What sets it apart from a plain systolic array is that it
runs the same tile in any of seven ways, and picks per DNN operator the fastest:

| dataflow | what stays in the PEs | weight format |
|---|---|---|
| dOS | outputs (partial sums) | dense |
| dWS | weights | dense |
| dIS | inputs | dense |
| sOS | outputs | two-stage bitmap, zero **columns** of W skipped |
| sWS | weights | two-stage bitmap, zero **rows** of W skipped |
| sIS | inputs | two-stage bitmap, zero **rows** of W skipped |
| csOS | outputs | compressed sparse block (CSB): several sparse columns merged into one |

Sparsity is used only in the weights. The weights are pruned and compressed before
deployment, so the hardware never searches for zeros at run time. It only skips what
the stored format marks as zero. This directory holds a synthesizable SystemVerilog
model of the accelerator and its main memory, with a self-checking testbench for
every block.

## Architecture

```
          LU0  LU(R)  ...  LU(R+C-2)                 (top load units; LU0 is the corner)
           |    |            |
  LU0  -> PE00 -> PE01 -> ... -> PE0,C-1 -> SU0
  LU1  -> PE10 -> PE11 -> ... -> PE1,C-1 -> SU1
  ...       |      |               |
  LUR-1 -> PER-1,0 ...          -> PER-1,C-1 -> SUR-1   (corner SU)
            |      |
          SU(R) SU(R+1) ...                     (bottom store units)

  all LUs and SUs <-> DecU <-> NPORTS x main_memory ports
  controller -> every PE, LU, SU and the DecU
```

* **PE (`pe.sv`, `pe_alu.sv`)**: a nine-word register file and an ALU. Each cycle it
  runs one command: an ALU operation (`MOV`, `ADD`, `MUL`, `MAC`, `CLR`) whose
  result goes into its own register file or into the right or lower neighbour's.
  In the same cycle it can copy one register into the right neighbour and one into
  the lower neighbour. Values therefore move one PE per cycle. The ALU works in
  IEEE binary32 (`fp`=1) or in 32-bit integers (`fp`=0).
* **Load units (`load_unit.sv`)**: one for each PE on the left edge and one for each
  PE on the top edge. The corner PE has a single LU, so there are `ROWS+COLS-1`.
  An LU reads one word per command and writes it into a register of its PE.
* **Store units (`store_unit.sv`)**: one for each PE on the right edge and on the
  bottom edge, with a single SU at the corner. An SU takes a register of its PE and
  writes it to memory.
* **DecU (`decu.sv`)**: the arbiter between the `2·(ROWS+COLS-1)` units and the
  `NPORTS` memory ports. It is also where decompression happens (next section).
* **Controller (`controller.sv`)**: holds the schedule of one tile and issues every
  command, one cycle at a time.
* **Main memory (`main_memory.sv`)**: `NPORTS` independent 32-bit ports. A read
  returns its data one cycle after the request. A write is visible from the next
  cycle on.

Register slots used by the schedules: 0 weight, 1 input, 2 partial sum/output,
3 partial sum arriving from a neighbour. Slots 4–8 are free.

## Sparse weight formats and how the DecU resolves them

**Two-stage bitmap** (sOS, sWS, sIS). The format has three parts:

* A first-stage bit array with one bit per weight vector: per column of W for sOS,
  per row for sWS and sIS.
* An element bit array with one bit per element of each *non-zero* vector, in
  vector order: `M` bits per column or `K` bits per row.
* The packed non-zero values, in the same order.

Example (sOS): the tile `[a 0 0 b; c 0 0 d; 0 0 0 e]` has column bits `1001`,
element bits `110 111` and values `a c b d e`.

**CSB** (csOS). Columns whose non-zero rows do not overlap are merged greedily. The
first column takes every later column that fits, and all-zero columns are dropped.
For every merged column and PE row, the tile stores the original column index, or
−1 for an empty slot. The values are stored by merged column and then by row.
The example tile becomes two merged columns with indices `0 0 −1 | 3 1 3` and values
`a c b d e`.

The controller skips zero vectors itself. For the vectors it does load, it asks for
each weight by its position `e` in the element bit array. The DecU answers such a
read in one of two ways:

* If bit `e` is 0, it answers zero at once and no memory port is used.
* Otherwise it reads the word at `nz_base + popcount(ebits[e-1:0])`.

A prefix count over the bit array, computed once per tile, gives that address.
For csOS the controller builds the bit array from the column indices (−1 → 0), so
the same mechanism serves both formats.

## The schedules

A tile is processed as a series of *vectors*. For each vector the controller does
three things:

1. The LUs load the vector. The controller waits until every LU is idle.
2. A **wavefront** of `ROWS+COLS-1` cycles runs, in which PE(r,c) acts only in
   cycle `r+c`.
3. For WS and IS, the SUs store one output vector.

Tiles smaller than the array are padded with zeros by LU "zero" commands, which
use no memory access. The padding means partial sums can pass through unused PEs
unchanged.

* **OS (dOS, sOS).** Vector k is column k of W, loaded by the left LUs, and row k of
  X, loaded by the top LUs. Each PE does `P += W·X`, passes W right and X down. sOS
  steps over columns whose first-stage bit is 0. After the last vector the outputs
  are shifted out: `COLS` times, the right-hand SUs store the right column and
  every PE moves its partial sum one PE to the right.
* **WS (dWS, sWS).** W is shifted in from the left first, one column per step, so
  that PE(r,c) holds W[r][c]. sWS loads only the non-zero rows, so a tile with more
  than `ROWS` rows fits if at most `ROWS` of them are non-zero. For each column j of
  X the top LUs load `X[·][j]`. Inputs flow down and partial sums flow right, and
  each PE adds its product to the sum from its left neighbour. The right-hand SUs
  store column j of Y at the original row numbers.
* **IS (dIS, sIS).** X is shifted in from the top first, so that PE(r,c) holds
  X[r][c]. For each row m of W (each non-zero row for sIS) the left LUs load
  `W[m][·]`, with PE row r receiving `W[m][r]`. Weights flow right and partial sums
  flow down. The bottom SUs store row m of Y.
* **csOS.** The left LUs load merged column j. Each PE row now holds weights of
  possibly different original columns, so a single input row does not fit them
  all. The controller keeps a *finished* mark per PE row and repeats three steps
  until every row is finished:
  1. It fetches the input row named by the first unfinished row.
  2. It sends that input row down the array. Only rows whose column index equals
     it do the multiply-accumulate.
  3. It marks those rows finished.

  Rows with an empty slot start out finished. In the example, merged column 1
  (`3 1 3`) takes two waves: input row 3 for PE rows 0 and 2, then input row 1 for
  PE row 1. Outputs leave as in OS.

For sWS and sIS, rows of Y that belong to zero rows of W are never written. The host
clears Y beforehand.

## Programming interface (`flexisaga.sv`)

While `busy` is low, the host owns memory port 0 through `host_en/we/addr/wdata`.
Reads return data on `host_rdata` one cycle later. The host uses this port to write
W, X and, if needed, a cleared Y. It then drives the `cfg_*` inputs and pulses
`start`. The controller captures these inputs:

| input | meaning |
|---|---|
| `cfg_df` | dataflow (`dataflow_e` in `flexisaga_pkg`) |
| `cfg_fp` | 1 = FP32, 0 = INT32 |
| `cfg_m, cfg_k, cfg_n` | W is M×K, X is K×N |
| `cfg_wbase, cfg_ldw` | W row-major (dense) or packed non-zero values (sparse) |
| `cfg_xbase, cfg_ldx, cfg_ybase, cfg_ldy` | X and Y, row-major with row pitches |
| `cfg_vbits, cfg_ebits` | first-stage and element bit arrays (sOS/sWS/sIS) |
| `cfg_csb_ncols, cfg_csb_idx[j][r]` | CSB merged-column count and column indices (csOS) |

`done` pulses once the last output word is in memory. The event outputs are meant
for performance counting:

* `ev_wave`: a wavefront starts.
* `ev_skip`: a zero vector is skipped.
* `ev_refetch`: csOS fetches an additional input row for unfinished rows.
* `n_zero`: the number of zeros the DecU answers in this cycle.

Limits of one tile:

* OS: M ≤ ROWS and N ≤ COLS.
* WS: at most ROWS stored rows and K ≤ COLS.
* IS: K ≤ ROWS and N ≤ COLS.
* The streamed dimension (K for OS, N for WS, M for IS) may be up to 255 for the
  dense dataflows. For the sparse dataflows it may be up to `TMAX`, which is also
  the largest number of CSB columns.

Larger GEMMs are split into tiles by the host. The host also adds the partial
results of successive K tiles.

## Parameters

| parameter | default | origin |
|---|---|---|
| `ROWS`, `COLS` | 8, 8 | one of the evaluated sizes (4×4, 8×8, 16×16); 8×8 is the size used for the operator-level comparison |
| `NPORTS` | 8 | evaluated memory setup: eight 32-bit ports, unit latency |
| data width | 32 | evaluated setup (FP32) |
| register file | 9 words | as described for the PE |
| `TMAX` | 16 | own choice |
| `MEM_DEPTH` | 16384 words | own choice |

## How far to trust it, and where it departs from the published description

The published description of FlexiSAGA gives its blocks and what they do. It gives
the dataflows as step-by-step register diagrams on a 3×2 array. It gives no
micro-architecture, so the following are choices of this implementation:

* **Timing.** The design uses diagonal wavefronts and non-overlapped load → compute →
  store phases. This is faithful to the step diagrams but not pipelined. The cycle
  counts are therefore not those of the published results and should not be
  compared with them.
* **Loading and unloading.** Stationary tiles are shifted in from the edge, and OS
  outputs are shifted out to the right-hand SUs. The diagrams do not show either.
* **Interfaces.** The LU/SU/DecU handshake, round-robin arbitration, prefix-count
  addressing, the configuration-register programming interface and zero padding
  are all choices of this implementation.
* **dIS orientation.** The overview drawing of dIS streams a row of W into a PE row.
  The detailed sIS example instead loads a row of W down the left PE column. This
  RTL follows the sIS example for both dIS and sIS.
* **csOS.** The worked example keeps a column index and a temporary index per PE
  row, with the temporary index moving down alongside the inputs. Here the input
  row in flight is a single register, which gives the same comparisons.
* **FP32.** Round to nearest even and flush-to-zero for subnormals. The multiply-
  accumulate rounds twice.
* **Memory.** The main memory has no banks: any port reaches any word. The
  published memory model spreads its ports over banks.
* **One tile per run.** Each run computes one output tile from one weight tile and
  one input tile, and writes it to memory. Partial results of successive K tiles are
  not accumulated inside the array: the host adds them up, as `tb_gemm_workload`
  does. The sparse metadata covers at most `TMAX` (16) streamed weight vectors per
  tile, and dense streamed dimensions are limited to 255 by the 8-bit size fields.
* **Not hardware.** Pruning and compression (the two-stage bitmap and CSB encoders)
  and the host are software. The testbench contains reference encoders.

Verification: every block has a self-checking testbench. `tb_flexisaga` runs every
dataflow at the default 8×8 size, in integer and FP32 mode. It checks every output
word against a reference product and checks that sOS beats dOS on a tile with zero
columns. It also requires every mechanism to occur at least once: wavefront, skip,
DecU zero answer, csOS re-fetch, padding and memory-port contention.
`tb_controller` replays the four worked sparse examples on a 3×2 array. It checks
the waves, the skips, the order of fetched input rows, which rows compute and where
every output goes.

## Files and simulation

`rtl/`: `flexisaga_pkg.sv` (types), `fp32_pkg.sv` (FP32 functions), `pe_alu.sv`,
`pe.sv`, `load_unit.sv`, `store_unit.sv`, `decu.sv`, `controller.sv`,
`main_memory.sv`, `flexisaga.sv` (top).
`tb/`: `tb_<block>.sv` for each block, plus `tb_gemm_workload.sv`. That one runs a
pruned 16x32 by 32x12 operator through the default 8x8 array as a sequence of tiles.
The host sums the partial outputs of the K tiles, and the result is compared with a
reference GEMM. It runs in dOS, sOS, csOS, dIS and sIS, and reports the
sparse-over-dense cycle ratios. With about 70 % vector sparsity these come out near
3x for sOS and csOS and 2.4x for sIS. This schedule does not overlap loading with
computing, so its absolute cycle counts are not comparable to published numbers.
Each testbench prints `TB_RESULT checks=N failures=M`.

Simulate with Verilator 5, for example the full design:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/flexisaga_pkg.sv rtl/fp32_pkg.sv rtl/pe_alu.sv rtl/pe.sv rtl/load_unit.sv \
  rtl/store_unit.sv rtl/decu.sv rtl/controller.sv rtl/main_memory.sv rtl/flexisaga.sv \
  tb/tb_flexisaga.sv --top-module tb_flexisaga
./obj_dir/Vtb_flexisaga
```

For another testbench, list the packages and the block's own files. The full-size
end-to-end test takes well under a second of simulation time.
