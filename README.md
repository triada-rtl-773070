# TriADA: a cube of multiply-add cells for separable 3D transforms

TriADA computes a three-mode matrix-by-tensor product with accumulation,

    Y[k1][k2][k3] = Y0[k1][k2][k3]
                  + sum over n1,n2,n3 of X[n1][n2][n3] * C1[n1][k1] * C2[n2][k2] * C3[n3][k3]

which is the general form of every separable 3D discrete transform: DCT, DHT,
Walsh-Hadamard and (with complex numbers) DFT, and their inverses. A direct
evaluation costs O(N^6) operations, and the usual separable evaluation
(three passes of matrix products) moves the tensor between memory and compute
three times. TriADA keeps the tensor still instead. It holds it in a
P1 x P2 x P3 cube of small cells, one tensor element per cell. It streams only
the coefficient matrices in from three memories at the edges of the cube, one
vector per clock cycle. Each cycle is a rank-1 (outer-product) update of the
whole cube: every cell does at most one multiply-add. Each pass is a sum over
one index, so a dense N1 x N2 x N3 transform takes exactly N1 + N2 + N3 cycles.

The cycle count depends only on the sizes, not on the values. It can only go
down: a coefficient vector that is all zero is skipped and costs no cycle.
Inside a vector, zero coefficients are not sent and the cells that would
receive them do no work.

This repository holds synthesizable SystemVerilog of the core, its three
coefficient streamers ("actuators"), the line network between them, and
testbenches that check it against a software model. The transforms checked are
the 3D DWHT, DCT-II and DHT.

## The three passes

The product is split into three passes. Each pass sums over one input index
and swaps it for the matching output index:

| Pass      | Cycles | Sums over | Result                                             | Coefficient streamer      |
|-----------|--------|-----------|----------------------------------------------------|---------------------------|
| Stage I   | N3     | n3        | x'[n1][n2][k3]  = sum x[n1][n2][n3] C3[n3][k3]     | actuator 3, holds C3      |
| Stage II  | N1     | n1        | x''[k1][n2][k3] = sum C1[n1][k1] x'[n1][n2][k3]    | actuator 1, holds C1      |
| Stage III | N2     | n2        | x'''[k1][k2][k3] = Y0 + sum x''[k1][n2][k3] C2[n2][k2] | actuator 2, holds C2  |

Cell (i1, i2, i3) holds all four values that have those coordinates: x, x',
x'' and x'''. The cell's position is the same in every stage. Only the meaning
of its indices changes: (n1, n2, n3), then (n1, n2, k3), then (k1, n2, k3),
then (k1, k2, k3). No element ever moves to another cell. Values travel only
along lines, within one cycle.

## Lines: H, L and F

Three families of multi-drop lines run straight through the cube. Each line is
named after the plane it stands on, and it touches every cell along one axis:

| Line        | Runs along | One line per | Carries in Stage I    | Stage II              | Stage III             |
|-------------|------------|--------------|-----------------------|-----------------------|-----------------------|
| H[i1][i2]   | i3         | (i1, i2)     | operand x from a cell | coefficient, act. 1   | unused                |
| L[i2][i3]   | i1         | (i2, i3)     | coefficient, act. 3   | operand x' from a cell| coefficient, act. 2   |
| F[i1][i3]   | i2         | (i1, i3)     | unused                | unused                | operand x'' from a cell |

In each stage one line family is the **X bus** and brings a coefficient from
an actuator. A second family, orthogonal to it, is the **Y bus**: one cell on
each Y line drives its own operand to all the other cells on that line.

Which actuator channel feeds which line follows from the index the stage
writes:

* Stage I: channel k3 of actuator 3 feeds all L[i2][k3] lines, for every i2.
* Stage II: channel k1 of actuator 1 feeds all H[k1][i2] lines.
* Stage III: channel k2 of actuator 2 feeds all L[k2][i3] lines.

Stages I and III both use the L family, but they index it differently:
Stage I by the line's i3 coordinate, Stage III by its i2 coordinate. The
design routes this in `triada_operand_mesh`.

Every line is resolved as a wired OR. A driver that is not sending puts out
all zeros, and assertions check that a line never has more than one driver in
a cycle. The code keeps two views of each line:

* the coefficient view has only the actuator drivers;
* the operand view has only the cell drivers.

Within any one stage, only one kind of driver uses a given line, so the two
views describe the same wire. Keeping them apart stops the netlist from having
a false combinational loop through the cells.

## One time-step: tags, pivots and the multiply-add

An actuator holds its N x N matrix with row t as the vector for time-step t and
column k as channel k. At step t, channel k carries the pair (C[t][k], tag),
where tag = 1 exactly when k = t. The diagonal element of each vector is the
**pivot**. The tag alone tells each cell what to do. No cell needs a step
counter or knows its place in the sum.

Take a cell in Stage I at step t = n3. Its X bus is its L line, which carries
the tagged coefficient (C3[n3][k3], tag = [i3 == n3]).

* **Pivot cell (tag = 1).** Its i3 equals n3. It drives its own x onto its
  H line (the Y bus), then adds x * c to its own x'. It drives even when c = 0,
  because the other cells on the line need the operand. It does not drive
  when x = 0, since every product would be zero. When c = 0 it skips only its
  own update.
* **Non-pivot cell (tag = 0, c != 0).** It takes the x sent on its H line and
  adds x * c to its x'. If no operand came, the pivot on that line had x = 0,
  and the cell does nothing.
* **No coefficient.** The cell is idle. This is the case for channels whose
  coefficient is zero, and for all cells while no stage is running.

Stages II and III work the same way with their own buses, operands and
results: (X, Y) = (H, L) with operand x' and result x'', then (L, F) with
operand x'' and result x'''.

Everything in a step happens inside one clock cycle: decode the line, drive the
pivot operand onto the Y bus, multiply, add, and register the result. The
critical path is actuator register → X bus → pivot decision → Y bus →
multiplier → adder → result register. No step needs more than one register
stage, because each stage's result register is written only in its own stage,
and the next stage's operand is that same register, already settled. That is
also why the next stage can start in the cycle right after the last step of
the current one.

The original activity diagram marks the pivot cell's path as the longest one:
receive, test the tag, test x, send, test c, update. In this implementation
the receiving cells have the longer path. They see the operand only after the
pivot has driven it, so their path is that chain plus the multiply-add.

`act_o` of each cell reports what it did in the step:

| Code           | Meaning                                           |
|----------------|---------------------------------------------------|
| `ACT_SEND_UPD` | pivot, sent its operand and updated               |
| `ACT_SEND`     | pivot with c = 0, sent its operand but did not update |
| `ACT_PIV_ZERO` | pivot whose operand is 0, sent nothing            |
| `ACT_RECV_UPD` | non-pivot, received an operand and updated        |
| `ACT_WAIT`     | non-pivot with a coefficient, no operand came     |
| `ACT_IDLE`     | nothing                                           |

The testbenches count these codes to show that each case really happens.
The end-to-end test also checks the total number of multiply-adds in each
run. It must equal the number of products whose operand and coefficient are
both non-zero: no cell computes with a zero, and no product is missed.

How much sparsity saves depends on the data. In one run with 90 % of all
tensor and coefficient values zero, an 8 x 8 x 8 transform took 13 time-steps
instead of 24, because many coefficient vectors were entirely zero. It did
125 multiply-adds instead of 12288. With half the values zero, few vectors
are entirely zero. The step count then stays at 24, and only the number of
multiply-adds falls (about 5000 in that test).

## Actuators and the hand-off between stages

`triada_actuator` is one coefficient memory with P output channels. It is used
three times. It holds a P x P register array, one bit per row telling whether
that row has a non-zero entry, and a small streaming state.

When started, it finds the first non-zero row with a priority search and puts
it on the channels. In each following cycle it moves on to the next non-zero
row. Zero rows are never put on the channels, so an all-zero coefficient
vector takes no time at all. In a channel:

* `vld` = (tag) or (coefficient != 0);
* `tag` is derived from the row and channel numbers, not stored.

In the cycle that carries the last non-zero row, `pass_o` pulses. The top uses
that pulse as the next actuator's start, so the streaming order is
3 → 1 → 2 with no cycle lost between stages. A matrix with no non-zero rows
at all passes on at once, in the cycle after its start. Such a stage costs one
cycle and does no work. Its coefficients are all zero, so its result, and
every result after it, stays zero.

The memory is read without being destroyed, so one load of C1, C2 and C3
serves any number of tensors. Rows beyond N stay zero after a clear. The
actuator therefore needs no size register: the zero-row skip ends the stream
after row N-1 by itself. The same mechanism handles N < P and sparse
matrices.

One detail is easy to miss. Because actuator 1 streams row n1 of its memory on
channel k1 as C1[n1][k1], C1 is loaded as it is, not transposed. Its row n1 is
column n1 of C1 transposed, which is the vector the Stage II sum over n1 needs.

The top decodes the current stage from which actuator is busy. At most one is
busy at a time, and an assertion checks this. `done_o` pulses in the cycle of
the last Stage III update. The result can be read from the cycle after.

### Timing of a dense 3 x 2 x 4 transform

    cycle    0     1 .. 4        5 .. 7        8 .. 9        10
    start_i  1
    stage    idle  I (n3=0..3)   II (n1=0..2)  III (n2=0..1) idle
    busy_o   0     1             1             1             0
    done_o                                     1 at cycle 9
    result                                                   readable

4 + 3 + 2 = 9 time-steps. If, for example, row 1 of C3 were all zero,
Stage I would take 3 cycles and everything after it would move one cycle
earlier.

## Number format

Every word is a 32-bit two's-complement number (`triada_pkg::DATA_W`).
Coefficients are fixed point with `FRAC` = 14 fraction bits. A multiply-add is

    acc <= acc + ((c * v) >>> FRAC)

with the 64-bit product shifted right, truncated to 32 bits, and added with
wraparound. Tensor values are in whatever scale the user chooses. The format
is carried through all three stages unchanged. So a coefficient of 1.0 is
16384, and a DWHT (±1 coefficients) is exact as long as the tensor's sum fits
in 32 bits. For transforms with real-valued coefficients, each of the three
passes adds one truncation per term. The testbenches give the data 8 fraction
bits, and an 8 x 8 x 8 DCT forward and inverse round trip then comes back to
within one integer unit.

There is no saturation and no rounding. If a design needs them, they belong in
`triada_pkg::fx_mul` and in the cell's adder.

## Host interface

The cube and the memories have simple write ports and one read port. These are
this design's own; the underlying algorithm does not define how data enters or
leaves.

* `clr_i` zeroes every cell register and every coefficient memory in one cycle.
* `cw_en_i/cw_sel_i/cw_row_i/cw_col_i/cw_data_i` write one coefficient.
  `cw_sel_i` = 1, 2 or 3 selects C1, C2 or C3.
* `tw_en_i/tw_i*_i/tw_x_i/tw_y0_i` write one tensor element x and the starting
  value Y0 of its result, and clear the cell's x' and x''. A non-zero Y0 gives
  the "multiply-add" form of the operation. Write 0 for a plain transform.
* `rd_i*_i/rd_y_o` read x''' of one cell (combinational).
* `start_i` starts a transform. `busy_o`, `done_o` and `stage_o` report
  progress. A start while busy is ignored, and writes while busy are forbidden
  (there is an assertion).

A typical sequence:

1. Pulse `clr_i`.
2. Write the N1 x N1, N2 x N2 and N3 x N3 matrices into the top-left corners
   of the memories.
3. Write the N1 x N2 x N3 tensor into the cells with index (n1, n2, n3).
4. Pulse `start_i` and wait for `done_o`.
5. Read Y[k1][k2][k3] from cell (k1, k2, k3).

Cells and entries outside the problem must stay zero. `clr_i` ensures that.

Loading takes one cycle per word, that is N1·N2·N3 cycles for the tensor. That
is much longer than the transform itself. A real system would widen these
ports, for example to one plane of the cube per cycle. That is outside what is
built here.

## Files

| File                           | Contents                                                  |
|--------------------------------|-----------------------------------------------------------|
| `rtl/triada_pkg.sv`            | data width, bus struct `bus_t` {vld, tag, val}, stage and activity enums, `fx_mul` |
| `rtl/triada_cell.sv`           | one cell: four registers, per-stage bus selection, pivot logic, multiply-add |
| `rtl/triada_operand_mesh.sv`   | H, L and F lines, actuator-to-line routing, one-driver assertions |
| `rtl/triada_tensor_core.sv`    | P1 x P2 x P3 cells plus the mesh, host write/read decode  |
| `rtl/triada_actuator.sv`       | coefficient memory with zero-row skipping, tag generation and hand-off |
| `rtl/triada_top.sv`            | three actuators chained 3 → 1 → 2, stage decode, host ports |
| `tb/triada_ref_pkg.sv`         | software model: the same three passes in the same number format |
| `tb/tb_triada_cell.sv`         | random buses and stages against a behavioural model of the cell |
| `tb/tb_triada_actuator.sv`     | random sparse matrices, checks every vector, tag, skip and pass timing |
| `tb/tb_triada_operand_mesh.sv` | 3 x 4 x 5 mesh: routing in every stage against an index model |
| `tb/tb_triada_tensor_core.sv`  | 3 x 4 x 5 core with the testbench acting as actuators     |
| `tb/tb_triada_top.sv`          | default 8 x 8 x 8 top: dense, sparse (including 50 % and 90 % zeros), smaller and odd-sized problems, all-zero matrix, start while busy; checks results, per-stage step counts, multiply-add counts, and counts every mechanism |
| `tb/tb_triada_transforms.sv`   | default top: 3D DWHT, DCT-II and DHT forward and inverse, exact against the model, round trip against the input |

The model in `triada_ref_pkg` applies the same truncation in the same order as
the hardware, so all result checks are exact, not within a tolerance. The
round-trip checks compare against the original input. They use a tolerance of
one integer unit.

## Simulating

With Verilator 5, from the repository root:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
        rtl/triada_pkg.sv tb/triada_ref_pkg.sv tb/tb_triada_top.sv \
        --top-module tb_triada_top -o sim
    ./obj_dir/sim

Every testbench ends by printing `TB_RESULT checks=<n> failures=<m>`. Each one
has a watchdog that ends the run with a failure if it hangs. Block-level
testbenches need only their own module, plus `triada_pkg.sv` (and the lower
modules, found through `-Irtl`). Both top-level testbenches run at the default
8 x 8 x 8 size. Building takes under a minute and running takes well under a
second.

The array size is set by `P1`, `P2` and `P3` on `triada_top`, and the
fraction width by `FRAC`. The word width is `DATA_W` in `triada_pkg`. The
cube has P1·P2·P3 multipliers, so the logic grows with the cube of the size:
8 x 8 x 8 is 512 cells with a 32 x 32 multiplier each.

## How this relates to the published architecture

The algorithm is followed closely:

* the three stages and their order;
* the stationary tensor and the cell coordinates in each stage;
* the bus families and the bus pair used in each stage;
* diagonal tagging;
* the send/receive/update decisions of a cell;
* not sending zero coefficients;
* skipping all-zero vectors;
* the chained hand-off between the actuators;
* N1 + N2 + N3 steps for a dense problem.

These parts are this design's own choices:

* **Size.** The published description fixes no array size. 8 x 8 x 8 is a
  default, and every module is parameterised.
* **Arithmetic.** No number format is given. 32-bit Q14 fixed point with
  truncation is used, and the datapath is real only, so a complex 3D DFT is
  not supported.
* **One step per clock.** Each time-step is one clock cycle, with a single
  combinational path from the coefficient register to the result register.
  The published description only requires the step to be long enough for a
  cell's work.
* **Waiting.** A cell's "wait for an operand" is not a stored state. Within a
  step, a cell that gets no operand just does not update.
* **Actuator memory.** The coefficient memory, described as a cyclic streaming
  memory, is a register array read by a row pointer. The pointer skips zero
  rows with a priority search, and the diagonal tags are computed rather than
  stored.
* **Host ports.** Loading, reading and clearing are by simple word-wide ports.
* **Stage signal.** Cells learn the current stage from a broadcast 2-bit stage
  signal.
* **Stage II operand lines.** In the published text, one sentence has the
  Stage II operand x' travel on the horizontal lines. Elsewhere, and in the
  per-cell diagram of that stage, the coefficient arrives on H and x' is sent
  on L. The design follows the second reading. The coefficient vector is
  spread over the (i1, i2) face, so it must use the H lines, and the operand
  then needs the family orthogonal to them.

Not built:

* **Problems larger than the cube.** Splitting a problem into tiles is only
  mentioned as future work.
* **Non-square coefficient matrices** (general matrix-by-tensor products,
  tensor compression). These need a different way of keeping the cells in
  step, which is not specified; the diagonal tag needs square matrices.
* **Complex arithmetic**, needed for the DFT.

The main application class that motivates the architecture has tensors of
32 to 128 points per side. These need a cube of that size, at least
32 x 32 x 32 cells. Set `P1`, `P2` and `P3` for that, but the logic and the
simulation time grow with the cube of the size.
