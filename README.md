# Batched tridiagonal solver for 2D ADI on an FPGA: SystemVerilog RTL

Alternating-direction-implicit (ADI) schemes need a very large number of
small, independent tridiagonal systems in every time step. A 2D mesh of
`nx × ny` points gives `ny` systems of length `nx` along x and then `nx`
systems of length `ny` along y. Each system on its own is a poor fit for a
pipelined FPGA datapath. The Thomas algorithm is strictly sequential, and its
forward loop has a long loop-carried dependency, because it needs a divide.

This RTL keeps the cheap, O(N) Thomas algorithm and gets throughput in two ways:

* **Interleaving across systems.** `G` systems are solved together. The
  datapath takes row *i* of system 0, then row *i* of system 1, and so on up
  to system `G-1`, and then moves to row *i+1*. When row *i+1* of a system
  comes round, its row *i* result has left the pipeline. So a fully pipelined
  operator chain issues one row per clock, even though the recurrence itself
  takes 15 cycles.
* **Vectorisation across lines.** Memory delivers 256-bit beats (`V = 8` FP32
  values). A compute unit (CU) has `V` solver lanes, which consume one whole
  beat per clock. Several CUs (`NCU = 3`) sit side by side, each fed by its
  own memory channel.

The hard part is getting the data in the right shape for the lanes. Along x,
one beat holds 8 neighbouring points of a *single* line. Along y, a line is
strided through memory. The x path uses a line buffer and an 8 × 8 register
transpose. The y path uses a whole XY plane held on chip. Both are described
below.

## The Thomas recurrences as built

For a system with sub-, main- and super-diagonals `a, b, c` and right-hand side `d`:

```
forward  (i = 0 .. n-1):  r    = 1 / (b_i - a_i c'_{i-1})
                          c'_i = r c_i
                          d'_i = r (d_i - a_i d'_{i-1})        (c'_{-1} = d'_{-1} = 0)
backward (i = n-1 .. 0):  u_i  = d'_i - c'_i u_{i+1}           (u_n = 0)
```

`thomas_fwd` implements the forward step as a pipeline of IEEE-754 binary32
operators:

* a multiply, `a·c'` and `a·d'` in parallel;
* a subtract;
* a divide `1/(…)`;
* a final pair of multiplies.

Its latency is `LAT_FWD = 2·LAT_MUL + LAT_ADD + LAT_DIV = 15` cycles. The
previous row's `c'` and `d'` of each of the `G` slots are kept in a small
register file, indexed by slot number. `thomas_bwd` does the same for the
backward step (multiply + subtract, `LAT_BWD = 6`), keeping the previous `u`
of each slot.

Correctness needs `G > LAT_FWD`. Both modules check this at elaboration time.
`G = 32` leaves about twice that margin.

The operators `fp_add`, `fp_mul` and `fp_div` are combinational cores
followed by `LAT` pipeline registers, so the retiming tool can spread the
logic. They round to nearest even, flush subnormals to zero and do not
produce NaN payloads. This is adequate for diagonally dominant systems. It is
not a full IEEE implementation.

## One lane: four stages and three ping-pong buffers (`thomas_lane`)

A lane works on *groups* of `G` systems. It has four stages, joined by
double-buffered memories (`pingpong_buf`). While the forward sweep works on
group *k*, the loader fills group *k+1*, the backward sweep finishes group
*k-1*, and the unloader streams out group *k-2*.

```
rows in ─► load ─►[a b c d]─► forward ─►[c' d']─► backward ─►[u]─► unload ─► u out
                  ping-pong   (thomas_fwd)  ping-pong  (thomas_bwd)  ping-pong   4-deep FIFO
```

The stages work as follows:

* **Load** writes rows in arrival order: system by system, rows ascending.
* **Forward** sweeps row-major across the slots.
* **Backward** sweeps the rows in descending order.
* **Unload** reads system by system again, so the output is in the same order
  as the input. A group is closed after `G` systems, or early when `in_last`
  marks the end of the batch.

Each stage spends about `G·n` cycles on a group. So a batch of `B` systems of
length `n` leaves after roughly

```
(3 + ceil(B/G)) · G · n   cycles
```

The 3 is the fill of the three downstream stages. A short last group still
costs a full `G·n` sweep. That is where the `ceil` comes from.

Two effects pull against each other. The forward stage waits for its 15-cycle
pipeline to drain before it hands a group on, and each read-to-FIFO path adds
a few cycles. Against that, the formula charges full sweeps for the fill,
which the real pipeline does not spend. With `G = 16` and `n = 12`, 37 systems
take 1085 cycles, against 1152 from the formula. The lane testbench checks
the formula as an upper bound.

The unloader reads block RAM with a registered read port into a 4-entry
`stream_fifo`. It issues a read only when the FIFO has room for every read
still in flight (credit-based). Output back-pressure therefore stalls the
lane cleanly, without dropping data.

Buffer sizes per lane:

| buffer | contents |
|---|---|
| input | 2 × G × NMAX rows of 4 words |
| middle | 2 × G × NMAX rows of 2 words |
| output | 2 × G × NMAX words |

At the defaults (G = 32, NMAX = 128) that is 8192 rows per bank of the input
buffer.

## x-dimension path: line buffer and V × V transpose

External memory streams a mesh row-major, one beat of `V` consecutive
x-points per clock. A beat therefore belongs to one system, but the `V` lanes
each want one value per clock of *different* systems. This is handled in two
modules.

**`xdim_reader`**
* Collects `V` complete x-lines into one bank of a ping-pong line buffer.
* Reads them back block column by block column: beat *j* of line 0, beat *j*
  of line 1, and so on up to line V-1.
* Loads each block into a V × V register array (`vxv_transpose`) and empties
  it column-wise. Output vector *r* of block *j* holds `x = jV + r` of all `V`
  lines. Lane *k* sees line *k*, in ascending x, one value per clock.
* The transpose is double-buffered: one block is loaded while the previous
  one is emptied.

**`xdim_writer`**
* Does the reverse on the solver outputs: V lane results per clock are
  collected into a V × V block.
* Emits them transposed, so each output beat is again `V` consecutive
  x-points of one line. Each beat is tagged with its row `y` and block column
  `j`.

## y-dimension path: the XY plane buffer (`ydim_plane`)

Along y, the points of a line are `nx` elements apart in memory. Instead of
strided reads, the CU stores a whole XY plane of x-solved results on chip.
Each beat goes to row `y`, column block `j`.

Once the plane is complete it is read column block by column block, with `y`
running fastest. A beat read at (y, j) holds element *y* of the `V`
neighbouring y-lines `x = jV … jV+V-1`, so each lane again gets exactly one
line, in order. No transpose is needed on this side. The plane buffer is
ping-pong too: one mesh is read while the x-solves of the next mesh fill the
other half.

## One compute unit (`tridiag_cu`)

```
beats ─► xdim_reader ─► V × thomas_lane (n = nx) ─► xdim_writer ─► ydim_plane ─► V × thomas_lane (n = ny) ─► beats
```

A CU runs the two implicit solves of one ADI time step on a batch of meshes.
Meshes go through one after another. The x and y solves are pipelined
against each other, so every stage is busy on a different mesh or group.

As in the heat-diffusion application, the coefficients are generated inside
the CU rather than read from memory: `a = coef_a`, `b = coef_b`,
`c = coef_c`, except `a = 0` on the first row and `c = 0` on the last row of
each line. Only the right-hand side (the mesh values) travels through memory.
So one input beat stream and one output beat stream per CU carry all the
traffic.

The `V` lanes of each dimension get identical control and run in lock step.
Assertions check that their handshakes agree, and lane 0's handshake drives
the unit.

Output beats come out in column-block order, with `y` fastest within a mesh.
Each beat carries `out_y`, `out_j` and `out_mesh` tags, so a write engine can
place it.

Restrictions:
* `nx` and `ny` must be multiples of `V`, and at most `NX_MAX` / `NY_MAX`.
* `nx`, `ny` and the coefficients are held constant while a batch is in flight.

## Top: `tridiag_accel`

`NCU` independent CUs share the clock, reset, mesh size and coefficients.
Each CU has its own valid/ready input and output stream, as arrays indexed by
unit. On a board, each stream is served by its own HBM channel through
memory-mapped read/write engines. Those engines are not part of this RTL.

| parameter | default | meaning |
|---|---|---|
| `NCU` | 3 | compute units |
| `V` | 8 | lanes per CU = FP32 values per 256-bit beat |
| `G` | 32 | systems interleaved per lane (must exceed `LAT_FWD`) |
| `NX_MAX`, `NY_MAX` | 128 | largest mesh side |
| `LAT_ADD`, `LAT_MUL`, `LAT_DIV` | 3, 3, 6 | operator pipeline depths (`tds_pkg`) |

Reset is synchronous and active-low throughout. All streams use a
valid/ready handshake: a transfer happens on a clock edge where both are high.

## Where this departs from the paper-level description

* **FP32 only.** There is no FP64 datapath. An FP64 build would need FP64
  operators and 4 values per beat.
* **Operator latencies are this design's choice.** The 3/3/6-cycle adder,
  multiplier and divider are not taken from vendor cores. `G = 32` is chosen
  to exceed the resulting 15-cycle forward loop.
* **The input buffer of a lane stores `b`** as well as `a`, `c`, `d`. This
  keeps the lane general, even though the CU's `b` is constant.
* **Drain overhead.** The forward stage drains its 15-cycle pipeline before
  handing a group on, which adds about `LAT_FWD` cycles per group to the
  `(3 + ceil(B/G))·G·n` model. The lane test still finishes under the model
  (1085 against 1152 cycles), because the model's fill term is pessimistic.
* **Not built:**
  - the explicit RHS stencil of the ADI step, and the iteration loop around it;
  - unrolling of that loop inside a unit (several RHS + x + y stages chained,
    with an external-memory delay FIFO returning the old `u` for the update).
    Each unit here holds exactly one x-solve + y-solve pair;
  - the HBM read/write engines and host interface;
  - the z-dimension solve for 3D meshes;
  - the tiled Thomas-Thomas / Thomas-PCR solvers needed for lines longer than
    `NX_MAX`;
  - the financial (SLV) application kernels.

  At the defaults, the built design covers 2D FP32 meshes from 8 × 8 up to
  128 × 128 (sides multiples of 8). It runs one x-solve plus y-solve pass per
  mesh.

## Verification

Every module has a self-checking testbench in `tb/`. Each testbench:

* compares against an independent reference computed in `real` arithmetic:
  the Thomas algorithm in double precision, and exact products, sums and
  quotients for the operators;
* prints `TB_RESULT checks=N failures=M`;
* has a cycle watchdog.

| testbench | what it covers |
|---|---|
| `tb_fp_add`, `tb_fp_mul`, `tb_fp_div` | 3000 random operands each, plus a few exact cases, with the latency checked |
| `tb_thomas_fwd`, `tb_thomas_bwd` | G interleaved random systems; exact latency |
| `tb_pingpong_buf` | bank swap, commit/release, metadata |
| `tb_thomas_lane` | back-to-back batches, short final group, input gaps, output back-pressure, cycle bound |
| `tb_vxv_transpose`, `tb_xdim_reader`, `tb_xdim_writer`, `tb_ydim_plane` | data reordering, bit-exact |
| `tb_tridiag_cu`, `tb_tridiag_accel` | end to end at V = 4, G = 16, 16 × 8 meshes, 100 meshes per unit |
| `tb_tridiag_accel_full` | the top with every parameter at its default; runs in about 31 000 cycles |

The end-to-end tests (`tb_tridiag_cu` and `tb_tridiag_accel`):
* hold the output off for a long time, then accept only half the time, and
  leave gaps in the input;
* count input stalls, output stalls, short groups, plane-buffer swaps and
  transpose overlaps, and fail if any of these never happens.

`tb_tridiag_accel_full` runs the top with every parameter at its default:
3 CUs × 8 lanes, G = 32, 128 × 128 meshes, two meshes per unit, with every
value checked. It ends in about 31 000 cycles, inside its bound of
`4·beats + 8·G·128`.

Simulate with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/tds_pkg.sv tb/tb_fp_pkg.sv tb/tb_tridiag_accel_full.sv \
    --top-module tb_tridiag_accel_full
./obj_dir/Vtb_tridiag_accel_full
```

Use any other `tb_*` module the same way. `tb_fp_pkg.sv` holds the
real/FP32 conversion helpers the testbenches share.
