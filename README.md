# A streaming FPGA accelerator for high-order star stencils

A star stencil of radius *r* updates every cell of a 2D or 3D grid from the
cell and its *r* nearest neighbours in each axis direction. For radius 4 in 3D
that is 49 floating-point operations and 25 operand cells per update. The
neighbours can be 4 rows or 4 planes away, so a streaming design must keep 8
rows (or planes) of the grid on chip. This RTL implements the accelerator
structure described in *High-Performance High-Order Stencil Computation on
FPGAs Using OpenCL* (Zohouri, Podobas, Matsuoka). The accelerator combines two
kinds of blocking:

* **Spatial blocking.** The grid is cut into blocks along x (2D), or along x
  and y (3D). Each block is streamed along the remaining axis: y in 2D ("1.5D
  blocking"), z in 3D ("2.5D blocking").
* **Temporal blocking.** `PAR_TIME` processing elements (PEs) form a chain,
  and each PE applies one time step. One trip of the data through the chip
  therefore advances the grid `PAR_TIME` steps, while DRAM traffic is only one
  read and one write per cell.

```
 DRAM bank --> read_kernel --ch--> PE0 --ch--> PE1 --ch--> ... PE(n-1) --ch--> write_kernel --> DRAM bank
```

Every stage is a streaming pipeline that handles `PAR_VEC` consecutive cells
of x per clock (one *vector*). Stages are joined by FIFO channels
(`channel_fifo`).

The RTL is parameterised the way the original OpenCL kernel is: dimension,
radius, block size, vector width and PE count are elaboration parameters. The
defaults are the best radius-4 2D configuration reported for an Arria 10 GX
1150: `DIM=2, RAD=4, BSIZE_X=4096, PAR_VEC=4, PAR_TIME=22`. In that
configuration, 17 × 4 × 22 = 1496 multiply-add units do 22 time steps on
4 cells per clock.

## 1. What is computed

For every cell *c* and time step *t*:

```
f_c(t+1) = cc*f_c  +  sum_{i=1..r} ( cw*f_w,i + ce*f_e,i + cs*f_s,i + cn*f_n,i [+ cb*f_b,i + ca*f_a,i] )
```

Here w/e are −x/+x, s/n are −y/+y, and b/a (3D only) are −z/+z. There is one
coefficient per direction (`coef_t`: `cc cw ce cs cn cb ca`). The coefficient
is not shared between the distances *i*, so every term costs its own multiply.
The sum is evaluated strictly left to right:

```
cc*fc, +cw*fw1, +ce*fe1, +cs*fs1, +cn*fn1, (+cb*fb1, +ca*fa1), +cw*fw2, ...
```

That is 4r+1 (2D) or 6r+1 (3D) multiply-add terms. Each term is one `fp_mac`,
which models one hard floating-point DSP.

**Arithmetic.** IEEE-754 single precision with round to nearest, ties to even.
In `fp_mac` the product is rounded before it is added, so each term has two
roundings, not one fused rounding. Subnormal inputs and results flush to
zero. Because the order and the rounding are fixed, results are
bit-reproducible. The testbenches compare them bit for bit with a
double-precision reference that rounds after every operation.

**Boundary condition.** A neighbour outside the grid takes the value of the
border cell in its direction. The *i*-th west neighbour of the cell at x is
read at distance `min(i, x)`. The same rule applies in every direction, for
every lane, and at every PE.

## 2. Overlapped blocks and the stream order

Each PE needs `r` cells of context on each side of a block, and each time step
consumes another `r`. A block of `BSIZE_X` cells therefore yields only a
*compute block* of valid results:

```
CX = BSIZE_X - 2*HALO,   HALO = PAR_TIME*RAD          (same for CY in 3D)
```

Block `b` covers global x from `b*CX - HALO` to `b*CX - HALO + BSIZE_X - 1`,
so neighbouring blocks overlap by `2*HALO`. The halo cells are computed
redundantly and thrown away by the write kernel. There is no exchange of
halos between PEs. The first block starts `HALO` cells left of the grid, and
the last one may run past its right edge. Those lanes are masked on the memory
side. With the defaults, CX = 4096 − 176 = 3920, so a 15680-wide grid is 4
blocks.

Every stage sees the same sequence of vectors:

```
for each block (by, bx)                 // by only in 3D
  for s = 0 .. NS-1                     // streamed axis: y (2D) or z (3D), whole grid extent
    for yl = 0 .. BSIZE_Y-1             // 3D only: rows of the block
      for xv = 0 .. BSIZE_X/PAR_VEC-1   // x vectors of the row
```

A *plane* is `BSIZE_X` cells in 2D and `BSIZE_X*BSIZE_Y` cells in 3D: one
step along the streamed axis. `PL = plane/PAR_VEC` is a plane in vectors.

## 3. Inside a PE (`stencil_pe`)

The PE is the core of the design. It has four parts.

**3.1 Shift buffer (`pe_shift_buffer`).** The last `2*RAD*PL + 1` vectors of
the stream are kept. In cells this is `2*RAD*plane + PAR_VEC`, the size the
paper gives for its shift register. The cell being updated is the one exactly
`RAD` planes behind the newest input. Its whole star then lies inside the
buffer, at constant distances from the newest vector:

| neighbour        | distance in cells | held in                                        |
|------------------|-------------------|------------------------------------------------|
| ±i along stream  | ±i·plane          | the same lane of the vector ±i·PL away         |
| ±i along y (3D)  | ±i·BSIZE_X        | the same lane of the vector ±i·BSIZE_X/PAR_VEC away |
| ±i along x       | ±i                | the centre vector or one of `ceil(RAD/PAR_VEC)` vectors on each side |

The buffer is a circular RAM with one write pointer, which is how a Block-RAM
shift register is built. Nothing moves in it. Each *tap* is a read port at a
fixed distance from the write pointer. The distances are computed at
elaboration by `make_taps()`. There are 2r+1 stream taps, 2r y taps (3D),
and 2·ceil(r/PAR_VEC) x taps. Taps are read on the same clock as the write
and registered, so the new vector counts as distance 0.

**3.2 Neighbour gather with clamping.** Stage G registers the global
coordinates of the centre vector. A combinational gather then picks the
4r+1 (or 6r+1) operands per lane. For every direction and distance *i* it
uses a small multiplexer on `min(i, distance to the border)`. The distance to
the border is clamped into `[0, RAD]`. This replaces the code generator the
original kernel used for the same purpose. Cells next to the inner edge of a
block are not clamped: they read the neighbouring data in the buffer, which
lies outside the block. They are halo cells, and their results are discarded.

**3.3 Flush.** A block is `NS` planes long, but its last `RAD` planes can
only be updated once `RAD` further planes have entered. After the `NS` planes
of a block, the PE runs `RAD` more planes of iterations that shift in zeros
without taking input. It produces output only from iteration `RAD·PL` on.
So for every block the PE:

* takes `NS·PL` vectors;
* runs `(NS+RAD)·PL` iterations;
* emits `NS·PL` vectors, in the same order as its input.

This is why PEs can be chained without any further control.

**3.4 Multiply-add pipeline.** There is one register stage per term and one
`fp_mac` per term and lane. Each stage carries the operands of the later
terms along. There is a single advance signal for the whole PE:
`adv = !out_valid || out_ready`. A full last stage whose result is not taken
freezes the shift buffer, the gather register and every stage together.

**Bypass.** With `bypass` high, the PE emits each centre cell unchanged, with
the same timing. The top sets it on PEs `steps..PAR_TIME-1`. A pass can then
apply fewer than `PAR_TIME` steps, for example 1000 iterations with 22 PEs =
45 full passes plus one 10-step pass.

**One flat loop.** The nested indices (block, plane, row, vector) advance as
one counter chain that steps once per iteration. This corresponds to the
loop collapsing of the original kernel: there is no per-loop-level state
machine, and no bubble at the boundary between rows, planes or blocks.

**Latency and rate.** A PE takes one vector per clock while it receives
input, and runs its flush iterations without input. The output centred on a
vector leaves `RAD·PL` iterations plus `NT+2` clocks after that vector came
in, where `NT = 4r+1` or `6r+1`.

## 4. Read and write kernels

**`read_kernel`** walks the stream order of section 2. For each vector it
issues one read of `PAR_VEC` cells:

* `rd_req_addr` is the signed row-major cell index of lane 0. It is negative
  left of the grid.
* `rd_req_mask` marks the lanes inside the grid.

The memory must answer in order, and the read kernel cannot refuse a
response. The responses go into the channel towards PE 0. A credit counter
allows no more outstanding requests plus buffered words than the channel
holds, so a response always finds room. For full throughput, `FIFO_DEPTH`
must exceed the memory latency in cycles.

**`write_kernel`** consumes the last PE's stream in the same order. It writes
only the lanes that are inside both the compute block and the grid, as a
valid/ready request with per-lane enables (`wr_mask`). A vector that is
entirely halo is dropped. Each grid cell is written exactly once per pass.
The kernel ends on one global vector counter compared with the total for the
pass, computed at `start`. This is the single-comparison loop exit used by the
original kernel in place of nested index checks.

## 5. Top level (`stencil_accel`) and how to drive it

| port | meaning |
|------|---------|
| `clk`, `rst_n` | kernel clock; synchronous active-low reset |
| `start` | one-cycle pulse that starts a pass |
| `nx, ny, nz` | grid size (`nz` ignored in 2D) |
| `steps` | time steps for this pass, 1..`PAR_TIME`; 0 means `PAR_TIME` |
| `coef` | `coef_t` coefficients |
| `busy`, `done` | `busy` is high during a pass; `done` pulses after the last write has been accepted |
| `rd_req_*`, `rd_resp_*` | read port (section 4) |
| `wr_*` | write port (section 4) |

Hold `nx`, `ny`, `nz`, `steps` and `coef` from `start` until `done`. On
`start` the top registers the block counts `ceil(nx/CX)` (and `ceil(ny/CY)`)
and starts all kernels one cycle later. A pass reads one buffer and writes
another. To run T steps, the host repeats passes and swaps the two buffers
between them. The original system keeps the two buffers in the two DDR4 banks
of the board.

Cycle count of a pass, when memory keeps up:

```
about  blocks*(NS+RAD)*PL  +  PAR_TIME*(RAD*PL + NT + a few)
```

In the second term, each PE adds one flush delay of `RAD·PL` iterations plus
its pipeline depth. The end-to-end tests check passes against
`blocks*(NS+RAD)*PL + PAR_TIME*(RAD*PL+NT+8) + 64`.

Other configurations from the paper, as parameters:

| configuration | DIM | RAD | BSIZE_X × BSIZE_Y | PAR_VEC | PAR_TIME |
|---|---|---|---|---|---|
| 2D r1 | 2 | 1 | 4096 | 8 | 36 |
| 2D r2 | 2 | 2 | 4096 | 4 | 42 |
| 2D r3 | 2 | 3 | 4096 | 4 | 28 |
| 2D r4 (default) | 2 | 4 | 4096 | 4 | 22 |
| 3D r1 | 3 | 1 | 256 × 256 | 16 | 12 |
| 3D r2..r4 | 3 | 2..4 | 256 × 128 | 16 | 6 / 4 / 3 |

Constraints:

* `BSIZE_X` must be a multiple of `PAR_VEC`.
* Blocks must be wider than `2*HALO`.
* For aligned memory access the original design keeps `PAR_TIME*RAD` a
  multiple of 4. This RTL does not need that alignment for correctness.

On-chip storage per PE is `(2*RAD*PL+1) * PAR_VEC * 32` bits. At the defaults
that is about 1.05 Mbit per PE and 23 Mbit for 22 PEs.

## 6. Files

* `rtl/stencil_pkg.sv`: shared types (`fp32_t`, `grid_cfg_t`, `coef_t`) and
  helpers.
* `rtl/fp32_mul.sv`, `rtl/fp32_add.sv`, `rtl/fp_mac.sv`: single-precision
  arithmetic.
* `rtl/pe_shift_buffer.sv`, `rtl/stencil_pe.sv`: the processing element.
* `rtl/channel_fifo.sv`, `rtl/read_kernel.sv`, `rtl/write_kernel.sv`,
  `rtl/stencil_accel.sv`: channels, memory kernels and the top.
* `tb/tb_*.sv`: self-checking testbenches, one per module. Each prints
  `TB_RESULT checks=N failures=M`.
* `tb/accel_env.sv`: memory model and checker for the end-to-end tests.
* `tb/pe_check.sv`: harness for the PE test.
* `tb/tb_fp_pkg.sv`, `tb/tb_stencil_ref_pkg.sv`: reference arithmetic and a
  reference stencil step.

What the tests cover:

* **`tb_fp_mac`.** About 8,200 random and corner-case operand sets.
* **`tb_stencil_pe`.** A 2D radius-2 PE and a 3D radius-1 PE over several
  blocks. The passes add random stalls, run at full rate with a cycle bound,
  and run in bypass.
* **`tb_stencil_accel`.** 2D and 3D accelerators at small sizes, over
  several passes, with random memory backpressure. It checks the grid bit for
  bit and that every cell is written once per pass. It also counts the
  following and fails if any of them never happens:
  * read and write backpressure;
  * credit throttling;
  * PE stalls;
  * full channels;
  * dropped halo vectors;
  * partial writes;
  * bypass;
  * multiple blocks.
* **`tb_stencil_accel_full`.** The default configuration, unmodified: one
  22-step pass over a 4020 × 4 grid (two blocks), checked bit for bit. It
  takes about 30 s of simulation after a 3-minute build.
* **`tb_workloads`.** Two more configurations at their full parameter values,
  on small grids, one pass each, checked bit for bit:
  * 3D radius 4: 256 × 128 blocks, 16 lanes, 3 PEs, a 240 × 110 × 5 grid
    (2 × 2 blocks);
  * 2D radius 1: 4096 blocks, 8 lanes, 36 PEs, a 4100 × 3 grid.

To simulate with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
  rtl/stencil_pkg.sv tb/tb_fp_pkg.sv tb/tb_stencil_ref_pkg.sv tb/tb_stencil_accel.sv \
  --top-module tb_stencil_accel -o sim && ./obj_dir/sim
```

Replace the last testbench file and the top module name to run another test.
The testbenches draw their random stimulus from `$urandom`.

## 7. Where this RTL departs from, or goes beyond, the original

* **Interfaces are this design's own.** The original gives the kernel
  structure, not signal-level interfaces. The memory ports, the valid/ready
  channels and the channel depth (`FIFO_DEPTH=16`) are choices made here.
  DDR4, its controller and the clock PLL are outside the design.
* **Rounding inside a DSP.** The original counts one DSP "FMA" per term but
  does not define the rounding inside it. This RTL rounds the product and the
  sum separately. A fused implementation would differ in the last bit.
* **The term order reads the sum as running over i = 1..r.** The formula's
  index starts at 0, but the stated operation count (12r+1 in 3D) only works
  with r neighbours per direction.
* **PE pipeline structure, buffer read latency and flush mechanism** are
  reconstructions. Only their function is given: deep pipeline, Block-RAM
  shift register, and radius-aware loop bounds.
* **Not implemented: padding.** The original pads the grid in memory by an
  amount tied to `PAR_TIME` to improve DRAM alignment. It is a host-side
  layout choice that affects bandwidth, not results, so it is left out.
* **Not modelled: DRAM behaviour.** The memory controller's splitting of wide
  accesses, and with it the 55–85 % pipeline efficiency reported for the real
  board, is not modelled.
* **Bypass is an addition.** The `steps`/`bypass` mechanism is added so that
  iteration counts that are not multiples of `PAR_TIME` can be run. It is
  needed for the reported 1000-iteration runs, but the original does not
  describe how it handles them.
* **Coefficients are run-time inputs.** They are shared by all PEs.
* **Not synthesised for an FPGA.** The code is written to be synthesizable,
  and the arrays map to RAM. Timing, DSP packing and block-RAM usage have not
  been checked against the resource figures reported for the original
  (for example 99 % of DSPs and 78 % of memory bits for the default
  configuration).
