# A 2D stencil accelerator with overlapped spatial blocking and a deep temporal pipeline

Iterative stencils such as heat diffusion update every cell of a grid from its
neighbours, once per time step. They need many bytes per operation, so an
accelerator is bound by memory bandwidth unless it does several time steps
for each trip through external memory. That is **temporal blocking**. The
classic FPGA way to do it is a chain of processing elements (PEs), each
applying one time step to a stream of cells. Each PE keeps only the two or
three rows it needs in a line buffer. Without **spatial blocking**, however,
a row of the whole grid must fit in every PE's buffer, which caps the grid
width at a few thousand cells.

This design cuts the grid into **overlapped column blocks** of `bsize_x` cells
and streams each block, row by row and top to bottom, through a chain of
`par_time` PEs. The line buffers then only have to hold rows of one block,
and the grid can be any size. Neighbouring blocks overlap, so no data has to
pass between them. The price is some redundant work at the block edges. Each
PE processes `par_vec` cells per clock.

The RTL implements the first-order 5-point **Diffusion 2D** stencil in single
precision:

    out = cc*C + cw*W + ce*E + cs*S + cn*N

A build-time parameter `STENCIL = HOTSPOT_2D` selects instead the
**Hotspot 2D** thermal stencil. It reads a second grid, the power dissipated
in each cell, that does not change from step to step:

    out = C + sdc*(P + (N+S-2C)*Ry_1 + (E+W-2C)*Rx_1 + (TEMP_AMB-C)*Rz_1)

The default parameters are `bsize_x = 4096`, `par_vec = 8` and
`par_time = 36`. They are the best published configuration of this
architecture on an Arria 10 GX 1150 board, measured at about 760 GFLOP/s.

## Data flow

```
            +--------------------------- stencil_accel ---------------------------+
 external   |                                                                     |
 memory ----+--> stencil_read --> PE_0 --ch--> PE_1 --ch--> ... --> PE_{n-1} --ch-+--> stencil_write --> external memory
 (rd port)  |    (address gen,    (time       (time                (time          |    (masked writes      (wr port)
            |     masked reads,    step 1)     step 2)              step n)       |     of compute blocks)
            |     FIFO)                                                            |
            +---------------------------------------------------------------------+
```

A **pass** reads the whole source grid once and applies up to `par_time`
time steps. It writes the result once, to a second buffer. The host runs
`ceil(iter/par_time)` passes and swaps the two buffers between them. If the
last pass has fewer steps left than there are PEs, the surplus PEs
**forward** their input unchanged: `cfg.active` tells each PE whether its
index is in use.

Every link is a valid/ready stream of `par_vec` cells. A `stencil_channel`
FIFO sits after each PE. Back-pressure can start anywhere: a stalled memory
write port stalls the write kernel, which stalls the last PE, and so on back
to the read kernel.

## The block stream: the part to understand first

Every kernel in the chain sees the same sequence of vectors. Each kernel
follows it with its own copy of `block_walker`, a single set of position
registers. It replaces three nested loops (block, row, vector) and ends on
one counter comparison.

With `halo = rad * par_time` (radius `rad = 1` here) and
`csize_x = bsize_x - 2*halo`:

* Block `b` covers grid columns `b*csize_x - halo` to
  `b*csize_x - halo + bsize_x - 1`. Blocks therefore overlap by `2*halo`
  columns. Block 0 starts `halo` columns left of the grid.
* Inside a block, rows `y = 0 .. dim_y-1` follow one another. Each row is
  `W = bsize_x/par_vec` vectors, left to right. The next block follows
  directly.
* The stream has `num_vecs = ceil(dim_x/csize_x) * W * dim_y` vectors. The
  host computes this number and passes it in `cfg.num_vecs`. It is the only
  exit condition any kernel uses.

Why the overlap is `halo` on each side: a PE computes every cell of the
block. The leftmost and rightmost cells of a block, however, see wrong
neighbours, because their west or east neighbour is the previous or next
row of the stream. After one time step the first and last column of the
block are wrong. After `k` steps the wrong region is `k` columns wide on
each side. After `par_time` steps only the middle `csize_x` columns, the
**compute block**, are correct. The compute blocks of consecutive blocks
tile the grid exactly, and those are the only cells the write kernel
stores.

With the defaults, `halo = 36` and `csize_x = 4024`. So 98.2 % of the cells
streamed from an interior block are written back.

Cells that lie outside the grid (`x < 0`, or `x >= dim_x` in the last block)
are not read: their lanes are masked in the read request, and the memory
returns zero for them. They are computed like all the others and never
written back. The grid width need not be a multiple of anything.

## Inside a PE

`stencil_pe` is made of three parts:

* a `stencil_shift_reg` line buffer;
* `par_vec` copies of `diffusion2d_lane` (or `hotspot2d_lane`);
* a `block_walker` that tracks the position of the cell being produced.

**Line buffer.** To update vector `k-W` of the stream, the PE needs three
vectors:

* vector `k` (the row below),
* vector `k-2W` (the row above),
* the cells just left and right of vector `k-W`.

The buffer therefore holds `2*bsize_x + par_vec` cells: the incoming vector
plus the `2W` before it. All neighbours sit at fixed offsets from the newest
cell.

The data are not physically shifted. The buffer is a block RAM of `2W`
vector words with a write pointer that advances once per vector; moving the
pointer shifts the stencil window forward. Per cycle, four words are read at
static offsets from the pointer: north, centre, and the words left and right
of the centre. West and east are the centre vector shifted by one lane,
filled in from those two words.

With the defaults, the buffer is 8200 cells (about 262 kbit) per PE, and
9.4 Mbit for all 36 PEs.

**One-row lag and drain.** Output vector `j` can only be computed once input
`j+W` has arrived. Every PE thus runs one row behind its predecessor. After
its last input, a PE makes `W` more iterations on dummy data to empty its
buffer. Input and output streams are both exactly `num_vecs` long, so every
PE and the write kernel stop on the same count.

**Grid boundary.** A neighbour that lies outside the grid is replaced by the
cell itself. Each lane compares its global `x`, and the row `y`, with the
grid edges.

This rule also separates the blocks in the stream. The first row of a block
ignores "north", which would be the previous block's last row. The last row
ignores "south", which would be the next block's first row. Consecutive
blocks can therefore follow each other without a gap.

**Arithmetic.** Each lane is a 5-stage pipeline:

1. five multiplies;
2. the first add;
3. the second add;
4. the third add;
5. the fourth add.

The adds go left to right, as the expression is written. The whole pipeline
and the PE's output register advance on one enable. The enable drops only
when the output is held and not taken. Forwarding PEs send the centre value
through the same pipeline.

The floating-point units `fp32_mul` and `fp32_add` round to nearest, ties
to even. They flush subnormal inputs and results to zero, as FPGA
floating-point cores usually do. Results match a scalar C-style reference
bit for bit.

## Hotspot 2D

With `STENCIL = HOTSPOT_2D` the read kernel also drives a second read port,
`pw_*`, with the same addresses relative to `cfg.pw_base`. Temperature and
power requests go out in pairs, each port with its own FIFO. Each stream
vector then carries `2*par_vec` cells: temperatures in the lower half, power
in the upper half.

A PE only needs the power of the centre cell. Its power word therefore goes
through `stencil_delay_line`, a one-row (`W`-vector) delay that lines it up
with the centre vector. It does not need the two-row buffer the
temperatures use. The PE passes the power on, unchanged, to the next PE. The
write kernel stores only the lower half.

`hotspot2d_lane` is an 8-stage pipeline:

* stage 1: `N+S`, `E+W`, `2*C` and `TEMP_AMB - C`;
* stage 2: the two `- 2*C` differences, and the multiply by `Rz_1`;
* stage 3: the multiplies by `Ry_1` and `Rx_1`;
* stages 4 to 6: the three adds onto `P`, in the order the formula is
  written;
* stage 7: the multiply by `sdc`;
* stage 8: the add to `C`.

`TEMP_AMB` is a build-time parameter set to 80.0, the ambient temperature
of the usual Hotspot benchmark. The other constants come from `cfg.hs`.

## Memory side

Both ports are cell-addressed, with `par_vec` cells and a per-lane mask per
access:

* **read**: requests use valid/ready. Responses come back in order, at least
  one cycle later, with no back-pressure. `stencil_read` keeps the requests
  in flight plus the words in its 16-entry FIFO below the FIFO depth, so
  every response has room.
* **write**: valid/ready. `stencil_write` masks:
  * halo columns;
  * columns outside the grid.

  A vector with no lane left is dropped without a memory access.

Addresses are `base + y*dim_x + x`. `y*dim_x` is kept by accumulation, not
by multiplication.

**Alignment padding.** The memory splits unaligned 512-bit accesses. To
avoid that, the host can pad the start of each buffer by `par_time mod 8`
cells. That makes the first compute block 512-bit aligned when `par_time`
is a multiple of four. In this RTL the pad is simply part of
`cfg.src_base` and `cfg.dst_base`.

## Host interface (`cfg`, sampled on `start`)

| field      | meaning |
|------------|---------|
| `dim_x`, `dim_y` | grid size in cells |
| `num_vecs` | `ceil(dim_x/csize_x) * (bsize_x/par_vec) * dim_y` |
| `src_base`, `dst_base` | cell address of cell (0,0) of each buffer, including padding |
| `active`   | time steps in this pass (`1..par_time`); PEs with index `>= active` forward |
| `coef`     | `cc, cw, ce, cs, cn` as IEEE single-precision bits (Diffusion 2D) |
| `hs`       | `sdc, rx1, ry1, rz1` as IEEE single-precision bits (Hotspot 2D) |
| `pw_base`  | cell address of cell (0,0) of the power grid (Hotspot 2D) |

`busy` rises on the cycle after `start` and falls when the write kernel has
taken the last vector. A pass takes about
`num_vecs + par_time*(bsize_x/par_vec + 7)` cycles when the memory never
stalls: one vector per clock, plus the fill time of the chain.

## Parameters

| parameter | default | origin |
|-----------|---------|--------|
| `BSIZE_X` | 4096 | published best Diffusion 2D configuration (Arria 10) |
| `PAR_VEC` | 8 | same |
| `PAR_TIME` | 36 | same |
| `CH_DEPTH` | 4 | this design's choice ("shallow" channels) |
| `RD_DEPTH` | 16 | this design's choice |
| `STENCIL` | `DIFFUSION_2D` | `HOTSPOT_2D` selects the second published 2D stencil |
| `RAD` (package) | 1 | all target stencils are first order |

`BSIZE_X/PAR_VEC` must be a power of two, at least 2, and
`BSIZE_X > 2*PAR_TIME`. The published tuning used power-of-two block sizes
and vector widths, and preferred `par_time` to be a multiple of four because
of the alignment padding.

## Where this RTL departs from, or goes beyond, the published design

The original accelerator is written as OpenCL kernels and compiled by a
high-level synthesis tool. The following are this RTL's own choices:

* the valid/ready handshakes;
* the channel depths;
* the memory port format;
* the pipeline depth of a lane;
* the drain scheme at the end of a pass;
* the order of the adds;
* how the PEs get their settings. The published PEs run freely, with no
  connection to the host, and are told apart only by a build-time index.
  Here the top wires `cfg` and `start` to every PE, and the index is the
  `PE_ID` parameter.

Not included:

* the **3D variants** (blocking in x and y, streaming in z, buffers of
  `2*bsize_x*bsize_y + par_vec` cells);
* the host program;
* the performance model.

The memory is outside the design: a behavioural model in
`tb/ddr_model.sv` stands in for it. The published design relies on the
synthesis tool to replicate the line-buffer RAM for its extra read ports.
Here it is one array with four combinational reads, and the synthesis tool
has to do the same.

## Files

`rtl/`:

* `stencil_pkg.sv`: types and the `cfg` struct.
* `fp32_mul.sv`, `fp32_add.sv`: single-precision floating-point units.
* `diffusion2d_lane.sv`, `hotspot2d_lane.sv`: one lane of the cell update.
* `stencil_delay_line.sv`: the one-row delay for the Hotspot power grid.
* `block_walker.sv`: the shared position counters.
* `stencil_shift_reg.sv`: the line buffer.
* `stencil_channel.sv`: the FIFO between stages.
* `stencil_pe.sv`: one PE.
* `stencil_read.sv`, `stencil_write.sv`: the read and write kernels.
* `stencil_accel.sv`: the top.

`tb/`:

* one self-checking testbench per module;
* the reference arithmetic packages `fp_ref_pkg` and `stencil_ref_pkg`;
* the memory model `ddr_model.sv`.

The testbenches:

* **`tb_stencil_accel`** runs the whole accelerator at a reduced size
  (`bsize_x 32`, `par_vec 4`, `par_time 4`). The grid is 50 x 9, and there
  are three runs of several passes each. The result is compared bit for bit
  with a plain row-major reference. The testbench also counts that every
  mechanism happened:
  * multiple blocks;
  * masked reads;
  * dropped halo vectors;
  * memory stalls;
  * back-pressure;
  * draining;
  * forwarding;
  * boundary fall-back.

  It also checks the cycle count of a stall-free pass.
* **`tb_stencil_accel_hotspot`** does the same for the Hotspot 2D build.
  It uses a second memory model for the power grid, and one run stalls
  70 % of memory accesses.
* **`tb_stencil_accel_hotspot_a10`** runs one 16-step Hotspot 2D pass on a
  100 x 6 grid. Its build has `bsize_x 4096`, `par_vec 8` and `par_time 16`,
  one of the published Arria 10 Hotspot 2D configurations.
* **`tb_stencil_accel_full`** runs one 36-step pass at the default size on a
  100 x 6 grid. Building it takes several minutes; running it takes seconds.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/stencil_pkg.sv tb/fp_ref_pkg.sv tb/stencil_ref_pkg.sv \
    tb/tb_stencil_accel.sv --top tb_stencil_accel
./obj_dir/Vtb_stencil_accel
```

Every testbench ends with a line `TB_RESULT checks=N failures=M`.
