# A splittable, dataflow-switching systolic GEMM engine for tensor-train networks

Tensor-train (TT) decomposition compresses a layer's weight matrix into a chain of
small three-way "cores". Running such a layer means contracting the input with
those cores one pair at a time. Each contraction is a matrix product, but the
shapes are awkward: one dimension is often a TT rank of a few tens, another an
image-patch count in the thousands, and the order of the contractions (the
*contraction path*) changes the shapes again. No single array shape or dataflow
suits all of them. Some contractions in a path are also independent of each
other and could run at the same time.

This RTL implements the accelerator architecture proposed in *Comprehensive
Design Space Exploration for Tensorized Neural Network Hardware Accelerators*
(Zhang, Li, Tian, Lu, Zhang). An offline search, not part of the RTL, picks for
every contraction the path position, the dataflow and the array partition. The
hardware then has to be able to:

* run a GEMM in **weight-stationary (WS)**, **output-stationary (OS)** or
  **input-stationary (IS)** dataflow, chosen per GEMM;
* use its 32 x 32 INT8 PE array **whole (1x1)** or as **two independent cores**
  of 32 x 16 (**1x2**) or 16 x 32 (**2x1**), so that two independent branches
  of a contraction tree run at once, and then join again for the dependent
  contractions;
* tile any matrix shape onto fixed on-chip buffers A_buf, B_buf and C_buf.

Everything here is synthesizable SystemVerilog except the DDR model used by the
testbenches.

## Block structure

```
              off-chip memory (word port: req/gnt, in-order rvalid)
                         |
                    dma_engine  <-------------------------+
                     |      ^                             |
          element writes   element reads (+requantise)    |
          (from memory,    (to memory, or on-chip move    |
           or a C_buf)      into either core's A/B_buf)   |
                     v      |                             |
   core 0: A_buf B_buf  C_buf      core 1: A_buf B_buf  C_buf
             |    |      ^                   |    |      ^
           dataflow_controller 0           dataflow_controller 1
             west/north lanes, op  |  south lanes       |
                     +-------------+--------------------+
                                   v
                     pe_array (M_PE x N_PE, split 1x1 / 1x2 / 2x1)

   tt_sequencer: program memory -> CONFIG / LOAD / STORE / MOVE / GEMM / SYNC / END
                 drives the DMA, both controllers and the partition select
```

| file | role |
|---|---|
| `rtl/tnn_pkg.sv` | widths, enums (dataflow, partition, PE op, opcode), instruction word, `sat8` |
| `rtl/pe.sv` | one processing element |
| `rtl/pe_array.sv` | the PE grid and the split multiplexers |
| `rtl/skew_line.sv` | per-lane delay lines (operand skew, result deskew) |
| `rtl/operand_buffer.sv` | A_buf / B_buf: INT8 tile, row- or column-vector reads |
| `rtl/output_buffer.sv` | C_buf: 32-bit tile, row- or column-vector writes with accumulate |
| `rtl/dataflow_controller.sv` | runs one GEMM on one core in WS, OS or IS |
| `rtl/dma_engine.sv` | block moves between off-chip memory and the buffers, and C_buf-to-operand copies on chip |
| `rtl/tt_sequencer.sv` | executes the contraction program |
| `rtl/tnn_accel_top.sv` | top level |

## The processing element and its one vertical bus

A PE has four registers: the west operand on its way east (`h_q`), the
vertical-bus output (`v_q`, 32 bits), an output-stationary accumulator (`acc_q`)
and a stationary INT8 operand (`stat_q`). The whole core applies one operation
per cycle. The dataflow (`df`) decides which operand the multiplier uses:

| op | WS / IS | OS |
|---|---|---|
| `PE_LOAD` | `stat <= v_in[7:0]`, `v_out <= v_in` (shift down the column) | — |
| `PE_CLEAR` | — | `acc <= 0` |
| `PE_COMPUTE` | `v_out <= v_in + stat * h_in` (partial sum flows down) | `acc += h_in * v_in[7:0]`, `v_out <= v_in` (B operand flows down) |
| `PE_DRAIN` | — | `v_out = acc` (combinational), `acc <= v_in` |

In every operation `h_out <= h_in`. The vertical bus is deliberately
reused: it carries stationary values during a load, partial sums in WS/IS,
sign-extended B operands in OS and accumulators during an OS drain. This is
how this design realises the paper's statement that dataflow switching comes
from the data-path multiplexers, the buffers' roles and the PE's choice of
stationary operand. The paper gives no PE micro-architecture; the operation
set is this design's own.

## How each dataflow is mapped

Take C (M x N) = A (M x K) x B (K x N), with a core of `rg` rows by `cg` columns.
Operands enter the west edge (one lane per core row) and the north edge (one
lane per core column). Each west lane `i` is delayed `i` cycles and each north
lane `j` is delayed `j` cycles (`skew_line`). This is the usual systolic
staggering: the value a PE needs from the west and from the north arrive in
the same cycle.

| | stays in the PEs | west edge streams | north edge | result leaves | pass loop |
|---|---|---|---|---|---|
| **OS** | C[i][j] in `acc` | column k of A, k = 0..K-1 | row k of B | bottom, one C row per cycle, last row first | M tiles of `rg` x N tiles of `cg` |
| **WS** | B[k][j] (K x N block) | row m of A (K slice), m = 0..M-1 | zeros (partial sums start at 0) | bottom: C[m][j] | K tiles of `rg` x N tiles of `cg` |
| **IS** | A[m][k] transposed: PE(i,j) holds A[j][i] | column n of B (K slice), n = 0..N-1 | zeros | bottom: C[j][n] (one C column) | K tiles of `rg` x M tiles of `cg` |

A pass goes through these phases:

* **OS:** CLEAR (1 cycle), COMPUTE (`K + rg + cg - 2` cycles), DRAIN (`rg`
  cycles). During DRAIN the accumulators shift down one row per cycle. The
  bottom edge then delivers row `rg-1`, `rg-2`, ... of the tile directly, with
  no deskew.
* **WS / IS:** LOAD (`rg` cycles), then COMPUTE (`S + rg + N_PE - 1` cycles,
  with S = M for WS and S = N for IS).
  * LOAD: the stationary block is pushed in from the north edge with the
    skew bypassed, last row first, so after `rg` cycles row `i` holds K index
    `i`.
  * COMPUTE: the partial sum for stream index `s` in column `j` leaves the
    bottom at cycle `s + rg + j`. A reverse delay line (lane `j` delayed
    `N_PE-1-j`) realigns the columns. The whole output vector for index `s`
    therefore appears at cycle `s + rg + N_PE - 1`. It is then written as a C
    row (WS) or a C column (IS).
  * The first K tile overwrites C, later ones add to it. This is C_buf's
    accumulate-on-write.

Every pass ends with one bookkeeping cycle. A GEMM thus raises `done`
`1 + passes x (phase cycles + 1)` cycles after the cycle that presented
`start`. Operands beyond M, K or N are fed as zeros, so partial tiles need no
special case. Loading the next stationary block is **not** overlapped with the
current stream. That is a simplification: the paper gives no cycle-level
schedule.

Which dataflow is fastest depends on the shape. OS streams K and pays
`rg + cg` fill cycles per (M, N) tile. WS streams M once per (K, N) tile, and IS
streams N once per (K, M) tile. This is the trade-off that the offline search
explores.

## Splitting the array into two cores

`pe_array` takes operand lanes and operations from two controllers, and
hands each controller its bottom row in the controller's own lane order:

* **1x1:** core 0 drives everything; core 1 is ignored.
* **1x2** (two `M_PE x N_PE/2` cores, the "two 32 x 16 cores" of the paper):
  column `N_PE/2` takes its west input from core 1 instead of from column
  `N_PE/2 - 1`. North lanes of the right half come from core 1. Both cores read
  the bottom row, each its own half.
* **2x1** (two `M_PE/2 x N_PE` cores): row `M_PE/2` takes its north input from
  core 1 instead of from row `M_PE/2 - 1`. West lanes of the lower half come
  from core 1. Core 0's results come out of row `M_PE/2 - 1`, core 1's out of
  the last row.

Each PE takes `op`/`df` from the core it belongs to, so the two halves can run
different dataflows on different GEMMs at once. The top passes each controller
its core size (`rows_g`, `cols_g`) for the current partition. The controllers
are otherwise unaware of the split. Each core has its own A_buf, B_buf and
C_buf. This lets the two branches of a contraction tree work on separate data
without arbitration.

## On-chip buffers

* `operand_buffer` (A_buf T_M x T_K, B_buf T_K x T_N):
  * INT8 storage, written one element per cycle by the DMA.
  * The controller reads a vector of `max(M_PE, N_PE)` elements per cycle,
    along a row or down a column. Reads are combinational; lanes past the
    tile edge read 0.
  * Reading both ways is what lets a buffer serve as the streaming source in
    one dataflow and as the stationary source in another. For example, A is
    read by columns in OS, by rows in WS and by columns (as a stationary
    block) in IS.
* `output_buffer` (C_buf T_M x T_N): 32-bit storage.
  * Writes are masked vectors along a row or down a column, either
    overwriting or adding (read-modify-write in one cycle).
  * The DMA reads it one element at a time.

Storage is plain register arrays with vector ports. This corresponds to a
fully partitioned array in high-level synthesis, not to a block-RAM macro.
The tile sizes default to 64 x 64 x 64, two array passes per dimension. The
paper names T_M, T_K and T_N but gives no values.

## The contraction program

The host writes a program of `instr_t` words (`tnn_pkg`) through
`prog_we/prog_addr/prog_data`, then pulses `start`. Fields are packed from MSB
down:

| field | bits | use |
|---|---|---|
| `op` | 3 | `OP_END, OP_CONFIG, OP_LOAD, OP_STORE, OP_GEMM, OP_SYNC, OP_MOVE` (0..6) |
| `core` | 1 | target core |
| `src` | 1 | MOVE: core whose C_buf is copied |
| `buf_b` | 1 | LOAD/MOVE into B_buf (else A_buf) |
| `part` | 2 | CONFIG: `PART_1X1 / PART_1X2 / PART_2X1` |
| `df` | 2 | GEMM: `DF_WS / DF_OS / DF_IS` |
| `acc` | 1 | GEMM: add into C_buf instead of overwriting |
| `trans` | 1 | LOAD: read the off-chip block column-major; MOVE: element (r, c) lands at (c, r) |
| `quant`, `shift` | 1, 5 | STORE: write `sat8(C >>> shift)` instead of the 32-bit sum; MOVE always requantises with `shift` |
| `dim0, dim1, dim2` | 16 each | LOAD/STORE/MOVE rows, cols; GEMM M, K, N |
| `addr`, `stride` | 32, 16 | LOAD/STORE word address and words per row |

The sequencer handles one instruction at a time. An instruction that cannot
go yet stalls and counts `perf_stalls`:

* **CONFIG** and **SYNC** wait until both cores are idle. CONFIG then changes
  the partition.
* **LOAD** and **STORE** wait until the DMA and the target core are idle, then
  hold until the DMA finishes.
* **MOVE** also waits for the source core to be idle, because its C_buf must not
  change during the copy.
* **GEMM** waits only for its own core. It then moves straight on, so a GEMM
  on the other core, or loads for it, proceed in parallel. `perf_dual` counts
  cycles with both cores busy.
* **END** waits for everything, then `done` pulses.
* A GEMM on core 1 under 1x1 is skipped and flagged by an assertion.

A two-branch TT step looks like this (it is what the end-to-end testbenches
run):

```
CONFIG 1x2
LOAD c0 A <- X ; LOAD c0 B <- G1 ; LOAD c1 A <- G3 ; LOAD c1 B <- G4
GEMM c0 OS (X x G1) ; GEMM c1 WS (G3 x G4)      -- both cores busy together
STORE c0 quant -> P ; STORE c1 quant -> Q ; SYNC
CONFIG 1x1                                       -- cores rejoin
MOVE c0.C -> c0 A (P) ; LOAD B <- G2 ; GEMM IS ; STORE quant -> R
LOAD A <- R (first K half) ; MOVE c1.C -> c0 B (Q, first half)
GEMM WS ; LOAD second halves ; GEMM WS acc=1    -- K larger than one load
END
```

An intermediate tensor can reach the next contraction in two ways:

* **Off chip:** STORE it (32-bit or requantised) and LOAD it back. This works
  for any tiling.
* **On chip:** MOVE copies a block of a C_buf into an A_buf or B_buf. The copy
  takes one element per cycle, with no memory traffic. The values are
  requantised to INT8 (`sat8(C >>> shift)`), and the copy can transpose.
  * The source may be the other core's C_buf. This is how the results of two
    parallel branches meet in one core when the array rejoins.
  * MOVE always copies from row 0, column 0 of the C_buf. A block must
    therefore start at the corner of the tile.

The paper calls its kernel streaming and stresses on-chip reuse, but it does
not say how intermediates move. MOVE is this design's interpretation. Nothing
forwards results element by element from the array straight into the next
GEMM.

## Off-chip port and DMA

`dma_engine` uses a simple word port:

* `mem_req`, `mem_we`, `mem_addr`, `mem_wdata` form a request, taken in a
  cycle where `mem_gnt` is high.
* Read data return in request order, one word per cycle, on `mem_rvalid` /
  `mem_rdata`.
* Each 32-bit word holds one element; loads take its low 8 bits.
* Requests are pipelined, so a load moves one element per cycle when the
  memory keeps up.
* The paper's interface is AXI-MM. An AXI-MM master bridge would sit between
  this port and the interconnect; it is not included.

## Parameters (`tnn_accel_top`)

| parameter | default | origin |
|---|---|---|
| `M_PE`, `N_PE` | 32, 32 | paper's evaluated array (32 x 32; 1024 DSPs on the FPGA) |
| `T_M`, `T_K`, `T_N` | 64 | assumed; paper gives none |
| `PROG_DEPTH` | 64 | assumed |
| operand / accumulator width | 8 / 32 (`tnn_pkg`) | INT8 from the paper; 32-bit accumulator assumed |

`M_PE` and `N_PE` should be even, so that the array can split. A GEMM's M, K
and N must fit its core's buffers (at most `T_M`, `T_K`, `T_N`). Larger matrices
are tiled by the program.

## Verification

Every module has a self-checking testbench in `tb/`. Each one ends with a
`TB_RESULT checks=N failures=M` line.

| testbench | what it shows |
|---|---|
| `tb_pe` | every PE operation against hand-computed values |
| `tb_pe_array` | OS and WS products on both cores at once in all three partitions (4 x 4 array) |
| `tb_operand_buffer`, `tb_output_buffer` | vector reads/writes, masking, accumulate, edges |
| `tb_dataflow_controller` | one core (controller + buffers + 4 x 4 array) on random GEMMs in WS, OS, IS, including partial tiles and accumulate; checks each GEMM's cycle count against the formula above |
| `tb_dma_engine` | strided and transposed loads, plain and requantised stores, under random back-pressure; on-chip moves (plain and transposed, one element per cycle, no memory request) |
| `tb_tt_sequencer` | command order, hazards (including a MOVE waiting for its source core), overlap of the two cores, partition changes, counters |
| `tb_tnn_accel_top` | the TT program above on a 4 x 4 array with 16-element tiles, checked word by word in a DDR model |
| `tb_tnn_accel_full` | the same program at the default 32 x 32 array and 64-element tiles (about 75k cycles) |

The two end-to-end benches count each mechanism and fail if any one never
occurs: all three dataflows, all three partitions, dual-core overlap,
sequencer stalls, DDR back-pressure, requantisation saturation, accumulating
GEMMs, multi-pass tiling, transposed loads, and on-chip moves within a core
and across cores. `tb/ddr_model.sv` is the
behavioural memory: random grant, fixed read latency.

To run one with Verilator:

```
verilator --binary --timing --assert -y rtl -y tb rtl/tnn_pkg.sv \
          tb/tb_tnn_accel_full.sv --top-module tb_tnn_accel_full -o sim
./obj_dir/sim
```

## Where this departs from, or goes beyond, the paper

* The paper describes the array, the three dataflows, the buffers, the
  dual-core split and the DMA interface at block level only. It gives no
  PE design, skewing, timing, instruction set or buffer sizes.
  * Everything at that level here is this design's own. In particular: the
    operation set, the shared vertical bus, per-core buffers, the program
    format, and the one-element-per-word memory port.
* The paper's kernel was written in C++ for high-level synthesis on an FPGA.
  This is hand-written RTL of the same architecture. It claims nothing about
  the paper's resource, power or latency figures.
* Not built:
  * the offline design-space search and its latency simulator;
  * the AXI-MM bridge and the DRAM;
  * element-level forwarding of results from one GEMM into the next (only
    the block copy MOVE exists);
  * overlap of stationary reloads with computation.
  * The paper's simulator used 3 MB + 1 MB of SRAM; the buffers here hold
    one 64-element tile per core.
* The paper draws one shared set of A, B and C buffers next to the array and
  does not say how the two cores divide it. Here each core has its own full
  set. In the 1x1 partition only core 0's set is used, so half of the buffer
  storage sits idle there.
* Added beyond what the paper states: accumulate-on-write in C_buf,
  requantisation on store and move, the MOVE instruction itself, and
  transposed loads. The latter are needed by
  the gradient GEMMs of training, which the paper evaluates.
* Reset is asynchronous and active low. It clears all control state but not
  the buffers or the program memory.
