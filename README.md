# ILU0-preconditioned BiCGStab on an HBM FPGA: SystemVerilog model

Reservoir and flow simulators spend most of their time solving large sparse
linear systems `A x = b`. This design solves them on an FPGA with an
ILU0-preconditioned BiCGStab loop. Almost all of the work falls into three
kinds of task:

* a **sparse matrix pass**: either `v = A y`, or one triangular substitution
  with the incomplete factors `L` or `U`;
* a **streaming vector operation**: axpy, dot product or norm over vectors
  that live in off-chip memory;
* a few **scalar operations**: the divisions and square roots that produce
  alpha, beta, omega and the residual norm.

The hardware has one unit for each kind, and a small fixed microprogram
sequences them.

The central idea is in the sparse matrix unit. The vector that a sparse
product multiplies can be read at random addresses. It is kept once, in a
large on-chip memory of 262144 doubles. The matrix is cut by the host into
*colors*: blocks of rows whose column indices together touch only a bounded
set of vector entries, called the color's *partition*. Before a color is
computed, its partition is copied into small multi-ported partition memories
beside the multipliers. Eight multipliers can then fetch eight random vector
values per cycle, while the matrix streams from memory one 512-bit line
(eight non-zeros) per cycle. The same colors let the triangular solves run in
parallel: all rows of one color are independent, so a whole color of a
forward or backward substitution can be in the pipeline at once.

All arithmetic is IEEE-754 double precision, with eight lanes per line and
512-bit memory lines.

## Block map

| Module | Role |
|---|---|
| `bicgstab_solver` | Top. Microprogram sequencer, on-chip vector memory arbitration, fill/dump of that memory, write-port mux |
| `matrix_op_unit` | Matrix operation unit: runs an SpMV, ILU0-forward or ILU0-backward pass color by color |
| `external_read_unit` (+ `line_reader`) | Reads the color size table, the partition indices and the matrix lines from off-chip memory |
| `internal_read_unit` | Gathers a color's partition from the on-chip vector memory and loads it into the partition memories |
| `spmv_pipeline` | Partition memories, 8 multipliers, control unit, selective adder tree, reduce unit, merge unit |
| `spmv_control_unit`, `selective_adder_tree`, `reduce_unit`, `merge_unit` | The per-row summation stages of the SpMV pipeline |
| `vector_partition_memory` | One partition copy with two read ports (one per multiplier pair) |
| `write_unit` | Re-orders out-of-order row results and releases complete, aligned lines |
| `ilu0_unit` | Applies `p - sum` (forward) or `(p - sum) / d` (backward) and writes back in place |
| `uram_vector_memory` | The 262144-entry on-chip vector memory, two ports |
| `vector_ops_unit`, `dot_axpy` | Two 8-lane units, each wired either as 8 axpy lanes or as a dot-product tree |
| `fp_scalar_ops`, `fp64_divsqrt` | Scalar multiply, divide, square root |
| `variable_registers` | alpha, beta, omega, rho, rho_new, convergence threshold and scratch values |
| `fp64_add`, `fp64_mul`, `fp64_pkg` | Pipelined double-precision operators and the shared bit-level arithmetic |
| `solver_pkg`, `sync_fifo`, `pipe_delay` | Shared types, FIFO, delay line |

## Matrix format: CSRO lines

The matrix is not stored in plain CSR. Row pointers cannot be consumed at a
rate of eight non-zeros per cycle without a second, irregular stream. Each
non-zero therefore carries a small **new-row offset**:

* 0 means the value belongs to the same row as the previous value;
* k ≥ 1 means it starts a new row, k - 1 rows after the previous one.
  So k - 1 empty rows are skipped.

The first value of a color has offset 1, relative to the row before the
color's first row `row0`. Values, column indices and offsets of a color are
packed eight to a line. In this design, one index line carries the eight
column indices in bits [255:0] and the eight offsets in bits [511:256]. The
column indices are **local**: they address the color's partition, not the
global vector. The last line of a color is padded, and a lane mask marks the
valid lanes.

## The SpMV pipeline

This is the hardest part of the design. Each cycle, one line of up to eight
non-zeros enters.

1. **Gather and multiply.** Four partition memories each hold a full copy of
   the partition and serve two lanes through their two read ports. The
   matrix values are delayed by the memory latency, so that each value meets
   its vector entry at the multiplier.
2. **Control unit.** From the eight offsets, the control unit works out in
   parallel:
   * the absolute row of every lane, as a running sum from the previous
     line's last row;
   * which neighbouring lanes share a row (segment flags for the adder tree);
   * whether the first row of the line continues a row from earlier lines;
   * whether the last row of the line may continue into the next line.

   It also publishes a **frontier**: the highest row for which every result
   has certainly been produced. This is what lets the write unit release
   lines.
3. **Selective adder tree.** A three-level segmented tree adds the products
   of equal rows within the line. It yields one sum per row segment.
4. **Reduce unit.** A row may span several lines. The open partial sum of
   such a row is kept and extended by the next line's first segment. The add
   in this feedback loop is combinational, so a row spanning many cycles
   costs no stall. Segments that are a whole row skip the reduce unit.
5. **Merge unit.** This puts the tree results and the reduce result of a
   cycle onto nine result ports, as (row, value, valid). Results leave out of
   order.

Flow control: the pipeline may run at most `WIN` rows ahead of the lowest
row the write unit still holds. When a line would overrun the window, the
line is held and a stall is counted.

### Write unit

The write unit keeps a buffer of `WIN` rows, banked by row modulo 8, so that
up to nine results per cycle can be written while a line is read. A *full*
bit per row records arrival. A line of eight rows is released once the
frontier has passed all of them. Rows that never receive a result are empty
rows of the matrix, and they are released as 0. Released lines are aligned
to 8-row boundaries and carry a lane mask, so a color that starts or ends
mid-line writes only its own rows.

## Colors, partitions and the look-ahead gather

For each color, the matrix operation unit goes through these steps:

1. **Sizes**: read once per pass. Each color has one size record: `row0`,
   `nrows`, `nnz`, partition size, and the line addresses of its partition
   indices and its matrix lines.
2. **Gather**: the external read unit streams the color's partition indices,
   which are global vector addresses, 16 per line. The internal read unit
   reads those addresses from the on-chip vector memory into a staging
   buffer.
3. **Transfer**: the staging buffer is copied into all partition memories,
   one value per cycle.
4. **Run**: the color's matrix lines stream through the pipeline into the
   write unit.

In **SpMV mode** the vector does not change during the pass. The gather for
color c+1 therefore starts as soon as color c begins to stream, and only the
transfer is left between colors (`overlap_cycles` counts the overlap). The
write unit spans the whole output vector, and results go to the write port
as lines with lane strobes.

In **ILU0 mode** the pass changes the vector it reads. Color c+1 may read
values that color c has just produced. This design therefore finishes and
writes back each color before it gathers the next one, so ILU0 passes run
without look-ahead. The source design forwards ILU0 results straight into
the partition memories to remove this wait. That is not built here (see
*Departures*).

## ILU0 application

`z = U⁻¹ (L⁻¹ p)` is done as two passes of the matrix unit over the vector
held in the on-chip memory:

* **Forward, with L** (strictly lower part, unit diagonal). For each row,
  `p[r] ← p[r] − Σ L[r,j] p[j]`.
* **Backward, with U** (strictly upper part). For each row,
  `p[r] ← (p[r] − Σ U[r,j] p[j]) / d[r]`.

The ILU0 unit takes the write unit's lines, reads the eight matching `p`
values from the on-chip memory and subtracts. In a backward pass it also
fetches the diagonal line and divides, using eight iterative dividers in
parallel. It then writes the results back in place.

The backward pass must visit rows from last to first. So the host stores U's
rows, and the diagonal, in reversed order, and the ILU0 unit addresses row
`r` at on-chip address `n − 1 − r`. With this, both passes use the same
forward-running pipeline and write unit.

## Vector operations: dot_axpy

Each `dot_axpy` has eight multipliers and eight adders, wired in one of two
ways:

* **axpy**: eight independent lanes, `y = a·α + b`.
* **dot**: eight products feed a seven-adder tree. The tree's per-line sums
  then feed one final adder whose output loops back.

A pipelined final adder cannot accumulate one input per cycle into a single
sum. Instead it pairs whatever is available:

* a new tree output with the adder's own result (`t + y`);
* a new tree output with a value parked in a hold register (`t + h`);
* its own result with the held value (`y + h`).

A lone value waits in the hold register. Once the input has ended, the pairs
collapse until one value is left, which is the dot product.

`vector_ops_unit` has two such units and four modes:

* `AXPY`;
* `DOT`;
* `DOT2`: two dot products over shared operands, used for t·s and t·t;
* `AXPY_NORM`: unit 0 computes an axpy, and unit 1 takes its norm on the
  fly. This gives the new residual and its norm in one pass.

## The solver microprogram

The top holds an instruction register and a 5-bit program counter into a
32-entry microprogram. The program is a function of the pc, and follows
textbook BiCGStab with x0 = 0 and rhat = r0 = b:

```
rho_new = rhat·r ;  beta = (rho_new/rho)·(alpha/omega)
p = r + beta (p − omega v)            (first iteration: p = r)
y = U\(L\p) ;  v = A y ;  alpha = rho_new / (rhat·v)
h = x + alpha y ;  s = r − alpha v
z = U\(L\s) ;  t = A z ;  omega = (t·s)/(t·t)
x = h + omega z ;  r = s − omega t  (with ‖r‖²) ;  rho = rho_new
stop when ‖r‖² ≤ improvement²·‖b‖²  or  iterations = max_iter
```

The top moves through these states for each kind of step:

* **Vector step**: `T_VOP` streams the operands from two read ports, then
  `T_VWB0/1` drain the results through a 16-line output FIFO onto the write
  port.
* **Matrix step**: `T_FILL` copies the source vector into the on-chip memory.
  `T_MAT` runs the pass. After an ILU0 backward pass, `T_DUMP` writes the
  on-chip vector back to off-chip memory. The vector stays on chip between
  the forward and backward passes.
* **Scalar step**: `T_SOP` runs `fp_scalar_ops` on the variable registers.

Off-chip, vector `k` (0 b, 1 x, 2 r, 3 p, 4 v, 5 y, 6 s, 7 z, 8 t, 9 h, 10
tmp) starts at line `vec_base + k·vec_stride`.

## Interfaces and timing

* Clock `clk`, active-low reset `rst_n`.
* Five read ports, 512 bits each:
  * `mv_`: matrix values;
  * `mi_`: matrix indices and offsets;
  * `mm_`: size table and partition indices;
  * `va_`: vector, and also the diagonal;
  * `vb_`: vector.

  Each read port is a request/response pair (`req_valid/ready/addr`, then
  `rsp_valid/data`). Responses come back in order, at any latency. Readers
  never have more requests in flight than their FIFO has room for, so the
  response side needs no ready.
* One write port `vw_`: `valid/ready/addr/data` plus eight lane strobes.
* Configuration, sampled at `start`:
  * `n`, `vec_base`, `vec_stride`;
  * for each of A, L and U, the size-table address and the color count;
  * `diag_base`, `desired_improvement`, `max_iter`.
* Results:
  * `done` pulses at the end; then `converged`, `iterations` and
    `norm = ‖r‖` are valid;
  * counters: `stall_cycles`, `overlap_cycles`, `spmv_passes`, `ilu_passes`,
    `vec_ops`, `scalar_ops`.
* Latencies:
  * adders and multipliers: 2 cycles (`ADD_LAT`, `MUL_LAT`), fully pipelined;
  * memories: registered read, 1 cycle;
  * division and square root: iterative, about one mantissa bit per cycle.
* In steady state, the SpMV pipeline and the vector units each take one line
  per cycle.

## Parameters

| Parameter | Default | Origin |
|---|---|---|
| `LANES` | 8 | source (8 multipliers and 8 adders) |
| `URAM_DEPTH` | 262144 | source (on-chip vector size; the column limit) |
| dot_axpy units | 2 | source |
| partition memories | 4, two read ports each | source (one per two multipliers) |
| `VPM_DEPTH` | 4096 | own choice (partition size limit) |
| `MAX_COLORS` | 256 | own choice |
| `WIN` | 512 | own choice (write-unit window, rows) |
| `MUL_LAT`, `ADD_LAT` | 2 | own choice |

Limits that follow from these defaults:

* at most 262144 columns (vector length);
* at most 256 colors per matrix;
* at most 4096 partition entries per color;
* a single line may not span `WIN` or more rows, through runs of empty rows.

Every matrix in the source's SpMV and solver benchmarks fits the vector
limit; the largest has 154699 columns. The color and partition limits depend
on the host's coloring, which the source does not tabulate.

## Departures from the source design

* **No forwarding of ILU0 results** into the partition memories. ILU0
  colors run strictly one after another, each re-gathering its partition.
  Results are identical; ILU0 passes are slower.
* **Scalar diagonal.** The source's backward substitution divides by 3x3
  diagonal blocks, left over from the simulator's blocked matrices. This
  design divides by one value per row.
* **No option to run without sparstitioning.**
* **Ports.** The source spreads its vectors and matrices over HBM channels
  and two DDR banks, with every port read-only or write-only. Here there are
  five generic read ports and one write port; mapping them to banks is left
  to the integrator.
* **BiCGStab form.** The source's listing starts with rho = 0 and has a few
  argument-order slips (in β and some axpy calls). This design uses textbook
  BiCGStab with rho = alpha = omega = 1 at start. Convergence is tested on
  squared norms.
* **Arithmetic details** are not specified by the source. This design rounds
  to nearest-even, flushes subnormals to zero, and returns a quiet NaN for
  invalid operations.
* **Host software is not included**: reordering, coloring, partitioning,
  CSRO conversion and the ILU0 factorisation. The testbenches build their
  small matrices themselves.

## Verification and simulation

Every block has a self-checking testbench in `tb/`. Each one compares the
block against values computed independently inside the testbench, has a
cycle watchdog, and ends with a `TB_RESULT checks=… failures=…` line. Where
a rate applies, for example one line per cycle through the pipeline, the
vector units or the partition transfer, the cycle count is checked too.

The two system tests are:

* **`tb_bicgstab_solver`**: reduced window, color and memory sizes. It solves
  a 64-unknown red-black-ordered 2-D Poisson system, with A in 10 colors and
  L/U in 6 each. The result is compared with a double-precision reference
  computed in the testbench. The test also counts that every mechanism
  occurred at least once:
  * write-window stalls and look-ahead overlap;
  * forward, backward and SpMV passes;
  * empty colors and rows spanning lines;
  * the hold register;
  * DOT2 and AXPY_NORM;
  * read and write backpressure;
  * both loop exits.
* **`tb_bicgstab_solver_full`**: the same problem with every top-level
  parameter at its default. This is the largest configuration simulated. The
  system size is 64 unknowns; full-size matrices are far beyond simulation
  time.

To run one test with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_bicgstab_solver \
  -y rtl -y tb +libext+.sv -Irtl rtl/fp64_pkg.sv rtl/solver_pkg.sv \
  tb/tb_bicgstab_solver.sv -o sim
obj_dir/sim
```

Replace the top module and file to run another testbench.
