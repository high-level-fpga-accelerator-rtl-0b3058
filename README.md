# Streaming stencil accelerator for explicit structured-mesh solvers

Explicit solvers on structured meshes advance a field one time step at a
time. Each new value of a mesh point is a small fixed formula (a *stencil*)
of the point and its neighbours from the previous step. Such solvers do
little arithmetic per byte moved, so on an FPGA they are limited by
external-memory bandwidth. The design here works around that bandwidth
limit in two ways:

* **Perfect data reuse within a step.** The mesh enters the chip once as a
  row-major stream. A *window buffer* keeps just enough recent rows (2D) or
  planes (3D) on chip that each point's neighbours are available when the
  point is updated. Each element is read from memory once.
* **Many steps per pass.** `p` compute modules are chained, each applying
  one time step. The output stream of module *k* is the input stream of
  module *k+1*. A single read and a single write of the mesh therefore
  advance it by `p` steps. `n_iter` steps take `n_iter/p` passes.

Each module updates `V` neighbouring points per clock (vectorisation,
V = 8). A steady-state throughput of one V-vector per clock per module
gives `V·p` point updates per clock.

Two kernels are built:

| kernel | stencil | V | p | largest mesh per block |
|---|---|---|---|---|
| Poisson-5pt-2D | `U' = (U_n+U_s+U_w+U_e)/8 + U_c/2` | 8 | 60 | 8192 columns, any number of rows |
| Jacobi-7pt-3D | `U' = k1·U(i+1)+k2·U(i-1)+k3·U(j-1)+k4·U+k5·U(j+1)+k6·U(k+1)+k7·U(k-1)` | 8 | 29 | 304 × 300 plane, any number of planes |

All arithmetic is IEEE-754 single precision. `stencil_accel_top` places both
kernels side by side. Each kernel has its own control inputs, statistics
counters and AXI4 master port towards external memory (DDR4 or HBM).

## Hierarchy

```
stencil_accel_top
├── poisson_accel                    (P = 60)
│   ├── pass_ctrl                    passes, ping-pong buffers, column blocks
│   ├── mem_reader ── sync_fifo      AXI read, 512-bit words → V-float vectors
│   ├── poisson_module × P           one time step each
│   │   ├── cyclic_buffer × 2        window buffer rows
│   │   └── poisson_cu × V           fp_add × 4, fp_mul × 2
│   └── mem_writer ── sync_fifo      vectors → 512-bit words, AXI write
└── jacobi_accel                     (P = 29)
    ├── pass_ctrl, mem_reader, mem_writer, sync_fifo   as above
    └── jacobi_module × P
        ├── cyclic_buffer × 4        two planes + two rows
        └── jacobi_cu × V            fp_mul × 7, fp_add × 6
```

Shared types are in `stencil_pkg`. These include `f32_t`, the 512-bit
`word_t`, the 34-bit byte address `addr_t` and the run configuration
`run_cfg_t`.

## The window buffer and the stream timing

This part is the core of the design and the easiest to get wrong.

**Stream order.** A mesh row of `m` points is padded to whole 512-bit words
(16 floats). It then travels as `M = pitch·16/V` vectors of V floats. Vector
index `c` counts x fastest, then rows, then (3D) planes. For centre vector
`c`, the neighbours in the stream are:

* west/east: `c-1`, `c+1`;
* north/south: `c-M`, `c+M`;
* 3D only, below/above: `c-P`, `c+P`, where `P = M·height` vectors per plane.

**2D buffer (`poisson_module`).** Once input vector `c+M` (the south
neighbour) has arrived, all neighbours of `c` are on chip. The buffer is a
delay line with taps:

```
in → r0 ──► buf_e (M-2) ──► rc ──► rw ──► buf_n (M-1) ──►
     c+M       c+1          c      c-1        c-M
```

A `cyclic_buffer` of depth `d` delays by `d+1` beats. It reads the old word
into its output register and writes the new word at the same address. The
taps are therefore exactly one beat apart in vector index. Two rows
(2·M vectors) are held on chip, which is what a second-order stencil needs.
Inside a vector, lane `l` takes its west value from lane `l-1` of the
centre. Lane 0 takes it from lane `V-1` of the west vector. East works the
same way in the other direction.

**3D buffer (`jacobi_module`).** The same chain is extended to cover two
whole planes:

```
in → r0 → buf_s (P-M-1) → buf_e (M-2) → rc → rw → buf_n (M-1) → buf_b (P-M-1)
     c+P      c+M            c+1        c    c-1     c-M           c-P
```

**Beats, latency and drain.**

* A module advances one *beat* in each cycle in which the global enable
  `en` is high and either
  * an input vector is present, or
  * all `T` inputs of the run have arrived and the module is draining.
* Output vector `i` leaves on beat `i+K`:
  * `K = M + 1 + 4` in 2D;
  * `K = P + 1 + 4` in 3D;
  * the `+4` is the latency of the stencil unit pipeline.
* Each module counts its own inputs and drains itself after the last one.
  No end-of-stream token is needed.
* With the pipeline never stalled, a chain of `p` modules finishes a pass in
  `T + p·K` cycles.
  * The analytic model for this architecture is `T + p·M·D/2` in 2D, where
    `D = 2` is the stencil order.
  * This design adds 5 beats per module to that.

**Borders.** Points on the outer faces of a mesh keep their value: the first
and last row, plane and column, and any padding columns. This gives fixed
(Dirichlet) boundary conditions. The units receive a `boundary` flag and
pass the centre value through. Vectors near a border are fed by stale buffer
contents. This is harmless, because their lanes on the border are passed
through and their interior lanes never read across the border.

**Stall behaviour.** The first module advances only when the reader has a
vector for it. Later modules receive a vector from the module before them on
the same beat, so the whole chain shares one enable, `en = space_ok`.
`space_ok` comes from the writer: it is low when the writer FIFO has fewer
than two free words. One shared enable keeps the chain free of handshakes
between modules.

## Batching

Many small meshes of the same size use the pipeline poorly: each one pays
the fill and drain of `p·K` beats. In a *batch*, `B` meshes are stored back
to back and streamed as one tall mesh, B·n rows (2D) or B·l planes (3D).

* The row/plane counter in each module wraps per mesh.
* The first and last row/plane of each mesh are treated as border. Meshes
  therefore never mix.
* Fill and drain are paid once per batch.

## Spatial blocking (2D)

A Poisson mesh wider than the window buffer (8192 columns) is split into
full-height column blocks (*tiles*) of `tile_words` 512-bit words.

* After `p` steps, a value depends on points up to `p` columns away.
  Neighbouring blocks are therefore read with `HALO_WORDS` extra words on
  each side.
  * `HALO_WORDS·16 ≥ p·D/2`.
  * For p = 60 this is 4 words = 64 columns.
* Only the block's valid interior is written back.
  * The writer still sends whole aligned 512-bit words.
  * It masks the halo columns with AXI byte strobes.
* A block that touches the left or right edge of the mesh is clipped there.
  The mesh edge is a real border.
* Blocks are computed in order and read the source buffer only. Overlapping
  writes therefore never corrupt data another block still needs.
* A `tile_words` at least the row pitch gives the baseline case: one block,
  read and written as a single contiguous run.

The 3D blocked variant of the Jacobi kernel is **not** built (see
"Departures" below). For the Jacobi kernel, `tile_words` must be ≥ the row
pitch.

## Passes and the control loop (`pass_ctrl`)

A run executes `cfg.passes` passes. Each pass is one or more *segments*
(one segment per block).

* Passes alternate between the two buffers `src_base` and `dst_base`.
* After an even number of passes the result is back in `src_base`. After an
  odd number it is in `dst_base`.
* Block offsets and halos are computed on chip, on the fly.
* The host writes the configuration, pulses `start` and waits for `done`.
  The number of time steps is `passes·p`.

## Memory interface

* **Bus and transfers.**
  * 512-bit AXI4 subset: INCR bursts, no IDs, responses assumed OKAY.
  * A burst never exceeds 64 beats (4 KB) and never crosses the end of a
    run.
* **`mem_reader`.**
  * Keeps several bursts in flight to cover memory latency. The memory model
    uses 14 cycles of read latency.
  * Outstanding words are limited by credits equal to its FIFO depth, so
    read data is always accepted.
  * Each 512-bit word leaves as `16/V` vectors.
* **`mem_writer`.**
  * Packs vectors into words.
  * Issues write addresses ahead of the data.
  * Keeps `busy` high until every burst has its B response.
  * The next segment only starts after the writer has finished. This matters
    for correctness with overlapping blocks.

## Configuration (`run_cfg_t`)

| field | meaning |
|---|---|
| `src_base`, `dst_base` | byte addresses of the two buffers (64-byte aligned) |
| `width` | mesh width `m` in points |
| `pitch_words` | row pitch in 512-bit words, `ceil(m/16)` |
| `rows` | rows per mesh: `n` in 2D, `n·l` in 3D |
| `height`, `planes` | 3D only: `n` and `l` |
| `batch` | number of meshes `B` stored back to back |
| `tile_words` | 2D block width in words (≥ pitch for no blocking) |
| `passes` | number of passes, each `p` time steps |

The Jacobi coefficients `k1..k7` are a separate input, `j_coef[7]`.

Requirements and limits:

* The kernel must be idle when a run starts.
* At least 3 vectors per row (`m > 16` with V = 8), at least 3 rows and,
  for 3D, at least 3 planes.
* The Poisson block width (tile plus halos, or the whole row) must be at
  most `MAX_WIDTH` = 8192 columns.
* Jacobi: width ≤ 304 (padded), height ≤ 300.

## Arithmetic

* `fp_add` and `fp_mul` are combinational single-precision operators.
  * Rounding is round-to-nearest-even.
  * Subnormal inputs and results are flushed to zero, as is usual for FPGA
    operators.
  * Infinities and NaNs propagate.
* `poisson_cu` (4 stages):
  1. `n+s` and `w+e`;
  2. the sum of the two, and `c·0.5`;
  3. `·0.125`;
  4. the final add.
* `jacobi_cu`: seven products, then a three-level adder tree,
  `((p1+p2)+(p3+p4)) + ((p5+p6)+p7)`.
* Results are bit-exact against a reference that performs the same
  operations in the same order. A different summation order would give
  different, equally valid, roundings.

## Departures from the published design, and what is assumed

* **Not built:**
  * the 3D spatially blocked Jacobi variant (V = 64, p = 3, 768×768 blocks);
  * the reverse-time-migration (RTM) kernel, whose 25-point, 6-component
    stencil function is not specified;
  * the host program;
  * the memory controllers.
* **Window buffer arrangement.** The published drawing shows a V = 2
  example with more registers. The register/buffer split here is
  equivalent and was chosen for any V. The 3D tap chain is this design's
  own.
* **Drain.** Each module drains itself, adding 5 beats (the unit latency)
  per module to the ideal `p·M·D/2` fill.
* **Boundary condition.** Fixed border values are assumed. The published
  design does not state its boundary treatment.
* **Block offsets.** These are computed on chip rather than precomputed by
  the host.
* **Back-pressure.** A single pipeline-wide enable driven by the writer
  FIFO stands in for the blocking streams of a high-level-synthesis flow.
* **Both kernels in one top.** They would normally be separate FPGA images.
  There is one memory port per kernel.
* **Jacobi vector width.** V = 8 for the Jacobi baseline is derived from the
  DSP budget (33 DSPs per point, 29 modules). It is not a printed figure.
* **Clock frequency** (250 MHz or so in the published implementation) and
  the placement across the FPGA's dies are implementation results, not part
  of the RTL.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M`.

* **Block testbenches**
  * Operators: random and directed values, including ties and specials.
  * Cyclic buffer: delays at several depths.
  * Stencil units: random stimulus with pipeline stalls.
  * Compute modules: random meshes and batches, with random input gaps and
    stalls; the cycle count `T + K` is checked.
  * FIFO, reader and writer: random memory stalls; the writer's masked
    columns must stay untouched.
  * `pass_ctrl`: segment geometry against an expected block list.
* **Models.** `tb/axi_mem_model.sv` is a behavioural AXI memory: sparse
  storage, configurable latency, random stalls on every channel.
  `tb/tb_fp_pkg.sv` holds a reference float adder and multiplier. They
  compute in double precision and round to single precision with their own
  code.
* **Kernel testbenches.** `tb_poisson_accel` and `tb_jacobi_accel` run whole
  kernels at small `p`.
* **`tb_stencil_accel_top`** runs both kernels at once at reduced `p`. It
  counts the mechanisms and fails if any never occurred: batching, spatial
  blocking, odd pass count, write back-pressure stall and read starvation.
* **`tb_full_size`** runs the top with every parameter at its default
  (p = 60 and 29, full window buffers) on small meshes:
  * a Poisson batch;
  * a blocked 400-column Poisson mesh;
  * a Jacobi mesh.

  It takes about a minute.

To simulate with Verilator (5.x), for example the top-level test:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv -Irtl -Itb \
    --top-module tb_stencil_accel_top rtl/stencil_pkg.sv tb/tb_fp_pkg.sv tb/tb_stencil_accel_top.sv
./obj_dir/Vtb_stencil_accel_top
```

Run it from the directory that holds `rtl/` and `tb/`. Modules are found
through `-y`. The two packages are listed explicitly, before the testbench.
Any other testbench is run by changing the top module name. Each testbench
prints the checks it made and its failures, and ends with
`TB_RESULT checks=N failures=M`.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `poisson_accel` | `V`, `P` | 8, 60 | lanes, chained modules |
| | `MAX_WIDTH` | 8192 | widest block (columns) |
| | `RD_FIFO`, `WR_FIFO` | 256, 64 | FIFO depths in words |
| `jacobi_accel` | `V`, `P` | 8, 29 | lanes, chained modules |
| | `MAX_WIDTH`, `MAX_HEIGHT` | 304, 300 | largest plane |
| `pass_ctrl` | `HALO_WORDS` | ceil(P/16) (set by `poisson_accel`) | halo per side in words, `P·D/2` columns rounded up |

On-chip storage per Poisson module is about `2·MAX_WIDTH` floats, 64 KB at
the defaults. Per Jacobi module it is about `2·MAX_WIDTH·MAX_HEIGHT` floats,
730 KB. The full 29-module Jacobi chain therefore needs about 21 MB of
on-chip RAM. That is within the URAM+BRAM of a large FPGA such as the
Alveo U280 (about 41 MB).
