# VersaGNN in SystemVerilog: one systolic array for both halves of a GNN layer

A graph neural network layer does two things. It multiplies node features by a
dense weight matrix (the Transformation). It also sums, or takes the max of, each
node's neighbours' features (the Aggregation). The second step is a product of a
very sparse adjacency matrix with a dense feature matrix (SpMM). Most
accelerators build separate engines for the two steps.

This design uses one array of processing elements (PEs) for both. Every PE is an
output-stationary multiply-accumulate cell that has two extra parts:

* a second dense data path that runs from south to north;
* a small content-addressable FIFO (FIFO_CAM) that lets it match sparse entries
  against dense rows as they flow past.

For dense products, four tiles of PEs form a ring and run one level of
Strassen's algorithm: 7 tile products instead of 8. For SpMM the same four tiles
form a chain.

The default build has two clusters of four 32 x 32 tiles, which is 8192 PEs. It
also has a 512 KiB banked scratchpad, an instruction queue and sequencer, an
activation unit and a result-reorder unit.

## Block map

| file | what it is |
|---|---|
| `rtl/versagnn_pkg.sv` | shared types: PE modes, reduction ops, the Strassen schedule tables, the instruction format |
| `rtl/fifo_cam.sv` | 4-entry FIFO with a parallel "first index >= key" search |
| `rtl/versagnn_pe.sv` | the hybrid PE: dense MAC, weighted aggregation, direct aggregation, ring shift |
| `rtl/systolic_array.sv` | a T x T tile of PEs with its input skew lines |
| `rtl/adder_array.sv` | a 1-D row or column of adders/subtractors that forms Strassen operand sums |
| `rtl/strassen_cluster.sv` | four tiles and their adder arrays, operand and output buffers, and the GEMM/SpMM sequencer |
| `rtl/result_reorder.sv` | reorder vectors for writing packed sparse tiles back |
| `rtl/activation_unit.sv` | ReLU / LeakyReLU on the write-back path |
| `rtl/scratchpad.sv` | banked single-port SRAM, one T x 32-bit row per word |
| `rtl/instruction_queue.sv` | instruction FIFO |
| `rtl/versagnn_controller.sv` | runs LOAD / GEMM / SPMM / STORE instructions |
| `rtl/versagnn_top.sv` | the accelerator |

## The PE

Each PE holds an accumulator `c` and works in one of three modes.

**Dense (`MODE_DENSE`).** The `a` operands travel west to east and the `b`
operands travel north to south. Each cycle that both are valid, the PE does
`c += a * b`, with a one-cycle register between fetch and MAC. This is a plain
output-stationary array.

**Weighted aggregation (`MODE_WGT_AGG`).** The sparse matrix enters from the
west. Each PE row gets one sparse row as `(column index, value)` pairs, with
indices increasing. The dense matrix enters from the south on the `d` path, one
row per cycle. A counter `b_row` in each PE counts the dense rows that have gone
past.

When an entry arrives, the PE compares it with the current dense row:

* If `idx == b_row`, the entry meets its dense row now. The PE multiplies
  directly and purges any stale FIFO_CAM entries.
* If `idx > b_row`, the entry came early. It is pushed into the FIFO_CAM.
* If `idx < b_row`, the row it needed has already gone past, so the entry is
  dropped.

Each cycle the FIFO_CAM is also searched with `b_row`. It compares every held
index with the key in parallel. Entries below the key are expelled. If the first
remaining entry equals the key, it is a hit, and its value is multiplied with the
current `d`.

There is one fetch stage and one MAC stage, so the PE takes one result per cycle
and never stalls.

**Direct aggregation (`MODE_DRT_AGG`).** The matching is the same, but the
sparse value is ignored. The PE folds `d` into `c` with the selected reduction
`ro`: add, min or max. `clear` loads `c` with that reduction's identity, which
for max is the most negative number.

**Overflow.** The FIFO_CAM is 4 entries deep. A push into a full FIFO raises the
PE's sticky `ovf_o`. The controller turns that into the accelerator's
`exception` bit. The sparse rows themselves must be arranged so that this does
not happen. The testbenches generate data that never holds more than 4 early
entries waiting at once.

**Ring shift.** While `shift` is high, the PE presents `c` on its south output
combinationally and loads `c` from its north input. A tile therefore moves its
whole result down by one row per cycle. The bottom row's output goes to the next
tile in the ring, so T cycles of `shift` hand a complete product to the
neighbour tile.

## Strassen on a ring of four tiles

A cluster computes `C = A x B` for one 2T x 2T tile (64 x 64 at the default
size). It splits each matrix into quadrants `X0 X1 / X2 X3`, where quadrant
`q = 2*rowhalf + colhalf`. The seven Strassen products are:

```
M0 = (A0+A3)(B0+B3)   M1 = (A2+A3)B0   M2 = A0(B1-B3)   M3 = A3(B2-B0)
M4 = (A0+A1)B3        M5 = (A2-A0)(B0+B1)               M6 = (A1-A3)(B2+B3)
C0 = M0+M3-M4+M6   C1 = M2+M4   C2 = M1+M3   C3 = M0-M1+M2+M5
```

The four tiles sit at ring sites 0..3: top-left, top-right, bottom-right and
bottom-left. Data moves from site s to site s+1, which is clockwise. Site s owns
one quadrant of C; the sites own C0, C2, C3 and C1 respectively.

Every product is added into the C quadrants that need it. This happens either
where the product was made, or after the product has moved one or more steps
along the ring. The schedule runs in two passes, one after the other.

| pass | site 0 | site 1 | site 2 | site 3 |
|---|---|---|---|---|
| 0 | M6 | M1 | M2 | M4 |
| 1 | M3 | M5 | M0 | idle |

The sign with which a site adds what it holds after `k` ring steps is listed
below; 0 means it ignores what it holds.

| pass | after 0 steps | after 1 step | after 2 steps |
|---|---|---|---|
| 0 | + + + + | - 0 - + | |
| 1 | + 0 + 0 | 0 + + 0 | + 0 0 0 |

Each pass runs through these stages:

* **Operand sums.** Every tile's operand sums come from the shared A and B
  buffers. Each tile has an adder column that forms the A-side sum, one column
  per cycle. It has an adder row that forms the B-side sum, one row per cycle.
  The sums go straight into the tile, which multiplies them.
* **Accumulate.** The finished product is added into the site's output buffer,
  which is a parallel add of the whole tile.
* **Shift and add.** For each further step, the tiles shift for T cycles. Then
  each tile adds or subtracts what it now holds.

The tables live in `versagnn_pkg` (`strassen_a_sel`, `strassen_b_sel`,
`strassen_sign`, `strassen_rots`). Changing the schedule means changing only
those tables.

A GEMM takes **9T + 8 cycles** from the start edge to the first edge where
`done` is high, which is 296 cycles at T = 32. The count is:

* one cycle to clear the output buffers;
* for each pass, 1 + T (feed) + 2T (drain of the skewed array) + 1 (accumulate);
* (T + 1) cycles for each ring step.

The cluster testbench checks this count. `rd_sel` then selects a C quadrant of
the output buffer.

## SpMM on a chain of four tiles

For SpMM the four tiles of a cluster form a chain. The dense matrix X enters
tile 0 from the south. It leaves tile 0's top edge and enters tile 1's bottom
edge, and so on, reaching tile s T*s cycles after tile 0. Each tile has its own
sparse tile on its west edge.

The stream of tile s must therefore start T*s cycles after that of tile 0. The
west input of PE row i is delayed by T-1-i cycles and the south input of column
j by j cycles. This way each sparse row meets the dense rows in order.

One SpMM instruction with a stream length `len` (cycles of tile 0) takes
**len + 5T + 5 cycles**. Afterwards each tile's output buffer holds its own
product. Results of different tiles are not summed.

## Packed tiles and result reordering

Sparse tiles with few entries per row can be packed two into one. Rows are
sorted by length, interleaved, and each entry is tagged with the tile it came
from. After the SpMM, the write-back must return each row to its original place.

`result_reorder` holds two reorder vectors, one per tag. Each maps a packed row
to its original row. A STORE with `reorder = 1` writes row r at
`addr + vec[r][tag]` instead of `addr + r`. Packing is done by software before
the data reaches the accelerator. Its output is the sparse streams together with
these vectors.

## Controller, instructions and the host side

`versagnn_controller` runs one instruction at a time from the queue.
`instr_t` in the package has the fields `op, cl, mat, quad, bank, addr, agg, ro,
act, reorder, tag, len`.

| op | effect |
|---|---|
| `OP_LOAD` | T scratchpad rows from `bank/addr` into quadrant `quad` of A (`mat=0`) or B of cluster `cl`; the low 16 bits of each 32-bit lane are used; one row per cycle, data one cycle after the read |
| `OP_GEMM` | Strassen GEMM on cluster `cl`; retires a few cycles after the cluster's `done` |
| `OP_SPMM` | SpMM on cluster `cl`, mode `agg`, reduction `ro`, stream length `len` |
| `OP_STORE` | T rows of output quadrant or tile `quad` through the activation unit `act` into `bank/addr`, optionally reordered; one row per cycle, written one cycle after it is read |

While an instruction runs, the controller owns the scratchpad bank it names, and
`host_gnt` is low for host accesses to that bank. The host can reach the other
banks at the same time.

`retired` counts finished instructions. `exception` is sticky and is set by any
FIFO_CAM overflow.

The sparse and dense streams of an SpMM are plain ports (`sp_*`, `x_*`). They are
taken while the cluster's `sp_run` is high. In a full system a DMA engine would
drive them.

## Where this RTL departs from the published design

* **Arithmetic is integer.** Operands are 16-bit two's complement and
  accumulators are 32 bits, where the published design uses FP16 inputs and FP32
  outputs. The PE and activation unit are marked partial for this reason.
* **The two Strassen passes run one after the other.** The published design can
  overlap them.
* **Placement of the left-column products is this design's own.** The placement
  of the right-column products follows the cluster figure.
* **C is kept in a per-site output buffer with a parallel add.** It is not
  accumulated in the PEs.
* **X is not fed back from c to d.** In the published design, the result of a
  Transformation can turn around at the bottom row of the array and feed the
  next Aggregation in place. Here the dense matrix of an SpMM enters from outside
  through `x_*`.
* **The SpMM chain does not sum across tiles.** Each tile's result is its own.
* **The activation unit has only ReLU and LeakyReLU.** The exponential needed by
  attention models (GAT) is not built. The LeakyReLU slope is 2^-3.
* **Each PE has one accumulator.** There are no dual accumulators for packed
  rows. Packed rows are told apart only at write-back, through the reorder
  vectors.
* **Some blocks are outside this RTL:** the host processor, the system bus, the
  L2 cache and LLC, DRAM/HBM, the DMA engine, block address mapping for tiled
  graphs, and the greedy packing algorithm, which is software. Their signals are
  ports of the top.
* **The following are this design's own choices:** the instruction format, the
  scratchpad geometry (4 banks x 1024 rows x 1024 bits), the FIFO_CAM overflow
  flag, and the bank arbitration.

## Capacity

Table 1 of the published design gives 8 tiles of 32 x 32; that is the default
here (`NC = 2`, `T = 32`). The peak is 8192 MACs per cycle.

No benchmark graph of the evaluation fits on chip whole. For example, Cora's
feature matrix alone is 2708 x 1433 x 2 B, about 7.4 MiB, against 512 KiB of
scratchpad. Such a graph runs as a sequence of 64 x 64 GEMM tiles and 32 x 32
SpMM tiles that the host must stream in. The DMA engine and address mapping that
would automate this are not built.

## Verification

Each block has a self-checking testbench in `tb/`. Each ends with a
`TB_RESULT checks=N failures=M` line.

* `tb_fifo_cam`: random push/search traffic against a reference queue,
  including hits, misses, expulsions and overflow.
* `tb_versagnn_pe`: a worked sparse example, cycle by cycle. The accumulator is
  0, 4 and 10 after cycles 2, 3 and 4. It also covers dense MAC, all reductions,
  the ring shift and overflow.
* `tb_systolic_array`: a T = 4 dense product, shift-out order, and weighted and
  direct SpMM.
* `tb_strassen_cluster`: three random GEMMs against a triple loop, with the
  9T + 8 cycle count, and four SpMMs with the len + 5T + 5 count.
* `tb_adder_array`, `tb_result_reorder` (the packing example: rows 1,4,2,3 and
  3,2,4,1), `tb_activation_unit`, `tb_scratchpad`, `tb_instruction_queue` and
  `tb_versagnn_controller`, which uses behavioural neighbours.
* `tb_versagnn_top`: the end-to-end test. At T = 4 with two clusters, it runs
  LOAD x 8, a Strassen GEMM, and STORE with ReLU. It then runs a weighted SpMM
  written back reordered, a direct max SpMM, and an SpMM arranged to overflow a
  FIFO_CAM. It counts each mechanism and fails if any never happened: GEMM, ring
  shift, weighted and direct aggregation, FIFO_CAM hit, activation, reordering,
  host refused on a busy bank, and exception.

The end-to-end test uses a FIFO_CAM depth of 2, so that a 4-wide row can
overflow it. It also passes unchanged with `T = 8`.

`tb_versagnn_full` runs the accelerator at its default size, with no parameter
overrides: two clusters of four 32 x 32 tiles, 8192 PEs. It takes one complete
dense operation through the instruction queue. That operation is eight LOADs,
a Strassen GEMM of two random 64 x 64 matrices, and four STOREs with ReLU. The
host then reads all 4096 results back and checks them, and the test checks
that the GEMM takes 296 cycles. With verilator the build takes about 7 minutes
and the run a few seconds. SpMM has been simulated only at the smaller sizes:
T = 4 and T = 8 end to end, and T = 4 for the cluster alone.

To simulate with plain verilator:

```
verilator --binary --timing --assert -Irtl rtl/versagnn_pkg.sv tb/tb_versagnn_top.sv \
    --top-module tb_versagnn_top -o sim && ./obj_dir/sim
```

Replace the testbench name to run any other block's test. The sizes are
localparams at the head of each testbench.
