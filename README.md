# An SM whose FP32 lanes double as a systolic array

A GPU streaming multiprocessor handles irregular, branchy kernels well. For the
dense matrix products that dominate DNN layers, though, it wastes energy and
register-file bandwidth. A systolic array is the reverse. This design keeps one
set of FP32 multiply-add processing elements (PEs) and uses them in two ways,
switching over time:

* **SIMD mode.** Each PE is an ordinary lane of the SM and executes warp
  instructions (here FFMA, `d = a*b + c`).
* **Systolic mode.** An 8×8 group of PEs becomes a weight-stationary systolic
  array. One instruction, `LSMA`, streams a block of A from shared memory
  through it. The result, added to a block of C, lands in the register file.

The SM holds three such 8×8 units (192 FP32 PEs). Each unit switches
separately, so SIMD warps can keep working on free units while others run an
LSMA. The RTL models one SM; `sma_sm` is the top.

## The semi-broadcast weight-stationary array (`sma_unit`, `sma_pe`)

PE(n,k) sits in row n, column k, and holds the stationary weight B[k][n].
Element A[i][k] is not passed from PE to PE. It is broadcast to all 8 PEs of
column k at once. Partial sums move one column to the right per cycle:

    y(n,k) <= A[i][k] * B[k][n] + y(n,k-1)        (column 0 adds +0)

The controller skews the columns: A[i][k] is presented in cycle i+k. Row n then
emits sum_k A[i][k]·B[k][n] = (A×B)[i][n] in cycle i+8. All eight rows finish
the same row i of the product in the same cycle. So one cycle's output is one
8-wide row of C, and the write to the register file is a single coalesced
access. This is why the array is transposed relative to the usual "outputs
flow down" picture.

In SIMD mode the same PE computes `a_lane*b + c_lane`. `b` is the PE's weight
register, which in SIMD mode holds an ordinary operand. That is the whole
mode switch: a 2-way operand mux per PE. Multiply and add are two separately
rounded IEEE binary32 operations (round to nearest even, subnormals flushed to
zero).

An inactive PE has its active-mask bit low:

* in systolic mode it passes the left partial sum unchanged;
* in SIMD mode it holds its result.

Columns are masked when the reduction depth K is not a multiple of 8.

## The LSMA instruction (`systolic_controller`)

`LSMA` computes `C[out] <- A[in] × B + C[in]` for:

* an M×8 block of A, taken from shared memory;
* one 8×8 sub-tile of B per selected unit;
* an M×8 block of C per unit, read from and written back to the register file.

Its fields are:

| field       | meaning |
|-------------|---------|
| `smem`      | shared-memory row of A[0][\*]; A[i][k] is in bank k, row smem+i |
| `rc`        | RF row of C row 0 of unit 0; row i of unit u is RF row rc+4i+u |
| `c_grp`     | which 8-lane group (0..3) of those RF rows holds C |
| `rb`        | RF rows of B: unit u uses rows rb+u and rb+4+u (element e = 32h+l of the row-major 8×8 tile is lane l of beat h) |
| `height`    | M, rows of A (1..768) |
| `unit_mask` | which of the three units take part; selected units form one 8×(8·units) array sharing the A broadcast |
| `col_mask`  | active columns (K positions) |

Units selected together share the A stream. The C layout uses 4-row strides
because the register file has 4 banks. With that layout, each unit's C rows
always sit in its own bank, so the three units write their rows of C in the
same cycle without a conflict.

The controller's steps:

1. **Weight load (3 cycles).** Reads the two B rows per unit and writes them
   into the repurposed operand-collector registers, transposed into
   PE(n,k) = B[k][n].
2. **Stream (M+8+3 cycles).** Eight A address generators (one per bank 0..7)
   read A[s-k][k] from bank k in step s, which gives the skew directly. The
   words pass through the A_in register onto the column broadcast. When a row
   of products leaves the array, the C[in] row that was read from the RF two
   cycles earlier is added to it by 24 row-end adders. The sum goes through
   the C_out register and is written back with an 8-lane write mask.
3. **Done.** `done` pulses, and the units return to SIMD mode.

From the cycle the command is accepted to `done`, an LSMA takes **M + 14
cycles**. The testbenches check this number. The controller runs one LSMA at a
time. A second LSMA issued meanwhile waits at dispatch.

LSMA is asynchronous for the issuing warp: the warp can go on issuing. `SYNC`
blocks the warp until no LSMA is in flight. That is the synchronisation a
program needs before reading C.

## Operand collector as weight buffer (`operand_collector`)

There is one collector per unit. For an FFMA it reads ra, rb and rc one after
another through the register-bank arbiter. It then fires lanes 0..31 of its
unit for one cycle and writes the 32 results back. In systolic mode its 64 `b`
registers are the unit's stationary weights. No separate weight buffer exists.

## Memories

* **`shared_memory`**: 32 banks of 32-bit words, 768 rows (96 KB).
  * The line port reads or writes one word per bank. That is a
    conflict-free warp access.
  * Banks 0..7 also have a systolic read port, where every bank reads its own
    row. This is the uncoalesced access that feeds A.
  * While the systolic port is in use, line reads are held off. Line writes
    continue.
* **`register_file`**: 2048 rows of 32×32 bit (256 KB) in 4 banks, with bank
  = address mod 4. Each bank has one read and one write per cycle, and writes
  are lane-masked.

## Scheduling and arbitration (`sma_warp_scheduler`, `sma_sm`)

One warp issues per cycle. While no LSMA is in flight, the scheduler uses
greedy-then-oldest: it stays on the last warp while that warp is ready,
otherwise it takes the lowest-numbered ready warp. While an LSMA runs it uses
round-robin. This way the warps loading the next tile and the warp issuing
LSMAs cannot starve each other, which double buffering needs.

A warp is ready when its slot holds an instruction the SM can accept now:

| instruction | needs |
|-------------|-------|
| FFMA        | a free collector on a unit in SIMD mode |
| STS / LDS   | a free load/store path |
| LSMA        | an idle controller |
| SYNC        | no LSMA in flight |

Each warp also has one outstanding FFMA/STS/LDS at most (a one-bit
scoreboard).

Each register-file bank has a fixed-priority arbiter. From highest to lowest:

1. the systolic controller's C and B accesses for the three units;
2. the load/store path;
3. the three collectors;
4. the host port.

The controller always wins its bank and is never delayed. Assertions in
`sma_sm` check this.

`sma_lsu` is the minimal load/store path (STS: RF row to shared-memory line;
LDS: the reverse). The host port of `sma_sm` (one RF row read or write per
cycle, when the bank is free) stands in for global-memory traffic.

## Running a GEMM

`tb_sma_sm` runs one full step of the tiling a GEMM uses, at the default
configuration:

* C (128×24) += A (128×20) × B (20×24), as three LSMAs over all three units;
  the last LSMA has only 4 active columns.
* A is staged into shared memory by loader warps with STS, one tile at a time.
* A 16-row LSMA on unit 0 only, which has to wait for the busy controller.
* FFMA warps that run on the free units while unit 0 is systolic.
* An LDS that is held off by the A stream.

It compares every result with an independent double-precision reference. It
also counts each mechanism and fails if one never occurs: both mode
switches, SIMD and systolic at once, masked columns, waiting LSMA and SYNC,
held LDS, bank conflicts, round-robin and GTO issue.

For larger matrices, loop over tiles. A 128×128 block of C is 16 column blocks
of 8 and fills exactly 512 RF rows. With `rc = 0`, the three units and the four
lane groups place 12 blocks in the rows that are 0, 1 and 2 mod 4. The other 4
blocks are LSMAs on unit 0 alone with `rc = 3`, in the rows that are 3 mod 4.
A double-buffered pair of 128×8 A tiles fills 256 of the 768 shared-memory
rows. The scale factors of `C = αAB + βC` are not part of LSMA; they are
ordinary FFMA work in SIMD mode.

## What differs from the paper's description

* The paper says the three units are "equivalent to 128 FP32 units". Its
  figure and its 8×8×3 configuration give 192 PEs; this design has 192.
* An FFMA uses lanes 0..31 of one unit. How warps map onto 64-PE units in SIMD
  mode is not specified, and this is the simplest choice.
* A_in and C_out hold one 32-bit word per entry. The paper counts 8 bytes per
  entry.
* The register file has 4 banks, and the C and B layouts follow from that. The
  instruction encoding, the exact cycle schedule, the fixed-priority bank
  arbiter and running LSMAs one at a time are all choices made here.
* Not built:
  * the instruction fetch/decode front end (instructions come in through
    per-warp slots on `sma_sm`);
  * the L1 data cache and global memory (replaced by the host RF port);
  * integer, branch and other SIMD instructions;
  * the multi-SM GPU.

## Simulating

Every testbench is self-checking and ends with a `TB_RESULT checks=… failures=…`
line. With verilator 5, from the directory holding `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
      +libext+.sv --top-module tb_sma_sm rtl/sma_pkg.sv tb/fp_ref_pkg.sv \
      tb/tb_sma_sm.sv -j 8
    obj_dir/Vtb_sma_sm

Replace `tb_sma_sm` with any other `tb_*` module to test a single block. The
full-size end-to-end test takes about 2500 cycles and well under a minute.
