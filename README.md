# Near-memory accelerators for genome filtering and weather stencils on an HBM FPGA

Pre-alignment filtering in genome analysis and the stencil kernels of
weather models do very little arithmetic per byte they read, and their
access patterns defeat CPU caches. On a CPU they run far below peak,
limited by memory. The idea behind this design is to put the compute next
to the memory: an FPGA with in-package HBM2 (32 pseudo channels of 256 bits)
runs many small processing elements (PEs), and each PE owns one HBM channel.
The PEs never compete for bandwidth, so throughput grows with the number of
PEs. A POWER9 host feeds the FPGA over a 1024-bit OpenCAPI link and takes
the results back.

This repository holds synthesizable SystemVerilog for that accelerator
functional unit (AFU) and for its three kinds of PE:

* **SneakySnake** (`sneaky_pe`): decides whether a read and a reference
  segment can be within E edits of each other, so that the costly
  dynamic-programming alignment runs only for pairs that might match.
* **hdiff** (`hdiff_pe`): horizontal diffusion. This is a compound stencil:
  Laplacians, then limited fluxes, then the update, applied to each
  horizontal plane of a 3-D grid.
* **vadvc** (`vadvc_pe`): vertical advection. This is a tridiagonal
  (Thomas) solve along every vertical column.

One accelerator build holds PEs of one kind. The `KERNEL` parameter of the
top picks which, and `N_PE` sets how many. The published configurations
are 12 SneakySnake PEs, 14 vadvc PEs or 16 hdiff PEs, each PE with a
dedicated channel of one HBM stack. The defaults build the 12-PE
SneakySnake accelerator.

## Data path of one job

```
 host lines (1024 b)                                              host lines (1024 b)
      |                                                                  ^
 data_fetch_engine  -- 256 b beats -->  hbm_write_engine (N_PE ch.)      |
  (AXI register, 32 x 32-bit buffer)      | PE 0 share -> channel 0      |
                                          | PE 1 share -> channel 1  write_back_engine
                                          ...                        (reads ch. 0,1,..,
   per PE p:  channel p --> hbm_read_engine --> FIFO --> PE --> FIFO  + stream_converter
              --> hbm_write_engine (1 ch.) --> channel p (results)     256 b -> 1024 b)
```

`nma_afu` runs a job in three phases, which its controller steps through:

1. **LOAD.** The host sends `ceil(N_PE * in_beats / 4)` cache lines. The
   data-fetch engine latches each line in a 1024-bit register, unpacks it
   into a buffer of 32 words of 32 bits, and sends it on as four 256-bit
   beats, the lowest words first. The load write engine stores the first
   `in_beats` beats in channel 0 from address 0, the next `in_beats` in
   channel 1, and so on. Each PE therefore gets an equal share of the work
   items. Beats in the last line that go past the job are dropped (the
   DRAIN step).
2. **COMPUTE.** All PEs start together. In each PE lane the read engine
   streams the lane's input from its channel into a FIFO and on to the PE.
   The PE's results go through a second FIFO to a one-channel write
   engine, which stores them in the same channel from `RES_BASE` (2^22)
   upward. The read engine and the result writer share the channel. When
   both ask in the same cycle, the write goes first. The phase ends when
   every lane has written all its result beats.
3. **WRITEBACK.** The write-back engine reads `out_beats` result beats from
   channel 0, then channel 1, and so on. Its stream converter packs them
   four to a 1024-bit line. A partly filled last line is padded with zeros.
   `done` pulses when the host has taken the last line.

How many beats an item uses is fixed per kernel (the `in_beats` and
`out_beats` functions in `nma_pkg`):

| kernel | one item | input beats | output |
|---|---|---|---|
| SneakySnake | one read/reference pair | 2 (reference, then read; 2 bits per base, A=0 C=1 G=2 T=3) | 1 byte `{pass, edits[6:0]}`, 32 per beat, last beat zero-padded |
| hdiff | one ROWS x COLS plane | ROWS*COLS/8 (raster order, 8 words per beat) | same layout as input |
| vadvc | one column of DEPTH levels | 4*DEPTH/8 (arrays a, b, c, d one after another) | DEPTH/8 (solution x) |

### The interfaces at the top

* `h2f_*`, `f2h_*`: 1024-bit valid/ready streams of cache lines. They
  stand in for the OpenCAPI TLx/DLx endpoint, which is not part of this
  RTL. Address translation and coherence are done by the host.
* `ch_*[p]`: one port per HBM pseudo channel. A request `{we, addr[22:0],
  wdata[255:0]}` is taken when `ch_req_valid && ch_req_ready`. A read
  returns exactly one beat on `ch_rsp_valid/ch_rsp_data`, in order, after
  any latency. This is a single-beat simplification of the 256-bit AXI3
  ports of the vendor HBM controller. Wrapping it in an AXI3 master is
  left to the integrator. Each channel holds 2^23 beats (8 GiB over 32
  channels).
* `start`, `n_items` (items per PE), `e_thr` (SneakySnake threshold,
  0..MAX_E), `coeff` (hdiff coefficient), `busy`, `done`.

## SneakySnake in hardware

Take the 2E+1 diagonals of the alignment matrix around the main diagonal.
Row d of the *chip maze* (d = -E..E) marks, for every reference position j,
whether read base j+d equals reference base j. A match is 0, a free
cell. A mismatch is 1, an obstacle, and so is a read index outside the
sequence. A route from the left edge to the right edge that may switch rows
freely, but must cross an obstacle to continue past the end of a free run,
crosses at least as many obstacles as the edit distance has edits. So if
even the best route crosses more than E obstacles, the pair cannot align
within E edits, and it is rejected without dynamic programming.

The best route is found greedily. From the current checkpoint, take the
row with the longest run of free cells. Step over the obstacle that ends
that run. Repeat. Because the choice after an obstacle does not depend on
how the route got there, no back-tracking is needed.

`sneaky_maze` builds all rows combinationally from the two sequences. It
builds them for `MAX_E` and forces rows with |d| > `e_thr` to obstacles.
`sneaky_pe` loads the rows into registers, one READ_LEN-bit register per
row, and then needs one cycle per checkpoint:

* every row's count of consecutive zeros from bit 0 is computed in
  parallel, and so is the maximum `longest` of those counts;
* if `longest` reaches the number of columns still ahead, the route is
  complete. The pair passes with `edits` obstacles.
* otherwise one more obstacle is counted. If that makes more than
  `e_thr`, the pair is rejected (reported as `e_thr+1` edits).
  If not, **all rows shift right by `longest + 1`**, so that the next
  checkpoint is bit 0 again.

The shift is what turns the software's data-dependent indexing into a fixed
datapath: every iteration looks at bit 0 of every row. A pair therefore
costs 2 cycles to take in, 1 to build the maze and at most E+1 search
cycles. For the 12-base example R = `GGTGCAGAGCTC`, Q = `GGTGAGAGTTGT`,
E = 3, the runs at the first checkpoint are 0,0,0,4,1,0,1. The route
crosses 3 obstacles and the pair passes. The testbenches check this
example.

## hdiff

For every point at least two cells from the plane border:

```
lap(r,c) = 4 in(r,c) - in(r-1,c) - in(r+1,c) - in(r,c-1) - in(r,c+1)
fx(r,c)  = lap(r,c+1) - lap(r,c);   fx := 0 if fx * (in(r,c+1) - in(r,c)) > 0
fy(r,c)  = lap(r+1,c) - lap(r,c);   fy := 0 if fy * (in(r+1,c) - in(r,c)) > 0
out(r,c) = in(r,c) - coeff * (fx(r,c) - fx(r,c-1) + fy(r,c) - fy(r-1,c))
```

A point near the border is copied unchanged. One output reads 13 input
points: five Laplacians of five points each, overlapping. Planes are
independent, so a PE gets whole planes (the 64 planes of a 256x256x64 grid
split over 16 PEs give 4 planes each). The PE loads a plane into an
on-chip buffer (ROWS x COLS words; on an FPGA this maps to URAM/BRAM with
enough read ports or partitioning). It then visits the points in raster
order at one point per cycle and packs 8 results per output beat. Per
plane that is ROWS*COLS/8 cycles to load and ROWS*COLS cycles to compute.

## vadvc

Each column gives a tridiagonal system `a[k] x[k-1] + b[k] x[k] + c[k]
x[k+1] = d[k]`. The Thomas algorithm solves it in a forward sweep
(`m = b[k] - a[k] c'[k-1]`, `c'[k] = c[k]/m`, `d'[k] = (d[k] - a[k]
d'[k-1])/m`) and a backward sweep (`x[k] = d'[k] - c'[k] x[k+1]`). Each
level depends on the one before it, so the PE works on one column at a
time. The two divisions of a level run in parallel on two `fx_div` units
(restoring division, 48 cycles each). A 64-level column takes 32 cycles to
load, about 64 x 50 cycles forward, 64 backward and 8 out. The PE takes
`a, b, c, d` ready-made. Forming them from COSMO's wind and tracer fields
is not part of this RTL.

## Number format

The weather kernels work on signed Q16.16 fixed point in 32-bit words
(`fx_t`, `fx_mul` in `nma_pkg`), not IEEE float32. The word size and the
stream layout are those of float32 data, so a float unit could replace the
arithmetic without changing any interface. Overflow wraps. The systems the
vadvc testbench solves are diagonally dominant so that the quotients stay
in range.

## How closely this follows the published design

These parts follow the published design:

* the platform widths (1024-bit host lines, 256-bit HBM beats, 32
  channels, 8 GiB);
* the engines and their order: data fetch with a 1024-bit register and a
  32 x 32-bit line buffer, HBM write with partitioning over channels, one
  HBM read engine per PE, the 256-to-1024 stream converter, write-back;
* FIFOs between the stages;
* one channel per PE and the equal split of the work;
* the PE counts per kernel;
* the chip-maze definition and the register-array/shift search of
  SneakySnake;
* the Laplacian/flux composition of hdiff;
* the two-sweep Thomas solve of vadvc;
* the sizes: 100-base reads, 256x256 planes, 64 levels.

These parts are this design's own, because the description leaves them
open:

* all handshakes, and the channel port in place of AXI3;
* the phased schedule: load, compute and write-back do not overlap;
* the channel address map and write-before-read priority;
* stream layouts and the base code;
* the maximum threshold MAX_E = 10 (the evaluated E is not stated) and the
  run-time threshold;
* the hdiff limiter and update formula (the usual COSMO form), and a
  scalar coefficient where COSMO has a field;
* border handling;
* fixed point in place of float32.

Two readings of the SneakySnake text conflict. One says the rows are
shifted "by the number of zeros", the other places the next checkpoint
after the obstacle. This RTL shifts by zeros + 1, which gives the
published example's count of 3.

Not built, because they are outside the accelerator or not described:

* the HBM stacks and the vendor HBM controller;
* the OpenCAPI endpoint and its memory controller;
* the host-side address translation;
* the greedy choice of BRAM/URAM mapping, which belongs to the synthesis
  tool flow;
* the multi-channel-per-PE variant (4 channels per PE). That variant is
  only an alternative to the single-channel-per-PE design.

## Sizes of the published workloads

* **SneakySnake**, 30,000 pairs of 100 bases on 12 PEs. Each PE gets 2,500
  pairs: 5,000 input beats and 79 result beats. This is simulated at full
  size by `tb_nma_afu_full` with random pairs (about 88,000 cycles).
* **hdiff**, 256x256x64 on 16 PEs. Each PE gets 4 planes; one plane fits
  the default 65,536-word buffer. `tb_nma_afu_weather` runs 16 PEs on one
  full 256x256 plane each, a quarter of the grid. Its compute phase takes
  about 84,000 cycles: 8,192 to load a plane, then one point per cycle.
* **vadvc**, 256x256x64 on 14 PEs. 65,536 columns do not split evenly over
  14 PEs, so the host pads the job to 4,682 columns per PE. Columns are 64
  deep, which is the default DEPTH. `tb_nma_afu_weather` runs 14 PEs on 4
  columns each, at about 3,400 cycles per column.

## Files

`rtl/`:

* `nma_pkg.sv`: widths, kernel enum, channel request struct, fixed point,
  beat counts per kernel.
* `stream_fifo.sv`: the stream FIFO.
* `data_fetch_engine.sv`, `hbm_write_engine.sv`, `hbm_read_engine.sv`,
  `stream_converter.sv`, `write_back_engine.sv`: the data path around the
  PEs.
* `sneaky_maze.sv`, `sneaky_pe.sv`: the SneakySnake PE and its maze
  builder.
* `hdiff_pe.sv`: the hdiff PE.
* `vadvc_pe.sv`, `fx_div.sv`: the vadvc PE and its divider.
* `nma_afu.sv`: the top.

`tb/`:

* One self-checking testbench per module (`tb_<module>.sv`).
* `tb_nma_afu.sv`: end to end with all three kernels at small sizes. It
  also requires each mechanism to happen at least once: host stalls, HBM
  back-pressure, a read and a write meeting on one channel, a dropped
  input tail, a padded last result line, and filter passes and rejects.
* `tb_nma_afu_full.sv`: the default top with 30,000 pairs.
* `tb_nma_afu_weather.sv`: the hdiff (16 PEs) and vadvc (14 PEs)
  accelerators at full plane and column sizes.
* Shared by the testbenches: `afu_env.sv` (host and memory environment),
  `hbm_channel_model.sv` (behavioural channel with latency and random
  back-pressure) and `tb_ref_pkg.sv` (independent reference models).

## Simulating

With Verilator 5, for example the end-to-end test:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/nma_pkg.sv tb/tb_ref_pkg.sv rtl/*.sv \
  tb/hbm_channel_model.sv tb/afu_env.sv tb/tb_nma_afu.sv \
  --top-module tb_nma_afu -o sim
./obj_dir/sim +verilator+rand+reset+2
```

`rtl/nma_pkg.sv` is named first so that the package is compiled before its
users; listing it again through `rtl/*.sv` is harmless. `-Wno-fatal` keeps
the remaining lint warnings (see below) from stopping the build.

Every testbench prints one `TB_RESULT checks=N failures=M` line and stops
itself after a fixed number of cycles if the design hangs. To change the
accelerator, set `KERNEL` and `N_PE` on `nma_afu` (for example
`.KERNEL(nma_pkg::K_HDIFF), .N_PE(16)`). The PE sizes are the `READ_LEN`,
`MAX_E`, `ROWS`, `COLS` and `DEPTH` parameters.

## Verification status

Every module's testbench passes. For each one a deliberately broken copy of
the module was run and made the testbench fail. The default 12-PE
SneakySnake accelerator returns the correct 30,000 results.

The hdiff and vadvc accelerators have been run end to end at their
published PE counts and plane and column sizes. Every result beat matched
the reference model. They have not been run on the whole 64-level grid:
hdiff ran one plane per PE instead of four, and vadvc ran 56 of the
65,536 columns.

All files are accepted by Verilator and by the slang front end of yosys.
The remaining Verilator lint warnings are intentional:

* `rst_n` is used both as an asynchronous reset and inside `disable iff`
  of assertions;
* the upper 56 bits of a SneakySnake input beat are unused, because 100
  bases need only 200 of its 256 bits;
* `coeff` is unused when the top is built for SneakySnake;
* some platform constants in `nma_pkg` are used by no module.
