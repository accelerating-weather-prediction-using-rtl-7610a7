# A near-memory stencil accelerator for weather prediction

Two of the most expensive kernels in a regional weather model are
memory-bound stencils. *Vertical advection* solves a tridiagonal system
down every column of the grid. *Horizontal diffusion* applies a compound
Laplacian stencil to every horizontal plane. On a CPU, both spend most of
their time waiting for DRAM. This design moves them into an FPGA that sits
next to High Bandwidth Memory (HBM) and is attached to the host through a
cache-coherent link that carries 1024-bit cache lines.

The central idea is **one memory channel per processing element**:

- The HBM stack is split into independent 256-bit pseudo-channels.
- Every processing element (PE) gets a pseudo-channel of its own, so PEs
  never compete for memory bandwidth. Performance then grows linearly
  with the number of PEs.
- The host cuts the grid into *windows* (tiles) and hands them to the PEs
  in turn.
- Each window travels host → HBM → PE → HBM → host through the PE's own
  channel.
- For small grids, a switch can skip the HBM round trip and feed the PE
  straight from the host stream.

The RTL here covers the accelerator functional unit: the logic between
the host link's DMA streams and the HBM controller's AXI3 ports. It does
not include the link protocol layers, the DMA engine, the HBM controller
and the host software. They connect at the top-level ports.

## Cache lines, beats and windows

Everything is expressed in units of the host's cache line:

- A line is 1024 bits, which is 32 float32 values. The `nero_pkg`
  constants are `LINE_W` and `LINE_LANES`.
- An HBM pseudo-channel moves one 256-bit beat per cycle, so a line is
  four beats. Beat 0 holds bits 255:0.
- A *window* is the unit of work a PE receives. Its layout depends on the
  kernel.

**Vertical-advection window.**

- A window covers `GROUPS × 32` columns and `DEPTH` levels. The default
  is 4 × 32 = 128 columns (a 64 × 2 horizontal tile) and 64 levels.
- Four fields are needed: the sub-diagonal `a`, the diagonal `b`, the
  super-diagonal `c` and the right-hand side `d`.
- The input stream is level-major. For level 0 it carries the `GROUPS`
  lines of `a`, then `b`, then `c`, then `d`. Then comes level 1, and so
  on. That is `DEPTH · 4 · GROUPS` = 1024 lines.
- The result is the solution `x`, in the same level-major, group-minor
  order. That is `DEPTH · GROUPS` = 256 lines.

**Horizontal-diffusion window.**

- A window covers `PLANES` planes of `ROWS` rows of 32 points; the
  defaults are 8 and 64.
- The input arrives plane by plane, row 0 first. There are
  `PLANES · ROWS` = 512 lines in and the same number out.
- The host must overlap neighbouring windows by the 2-point halo.

`nero_pkg::win_in_lines` and `win_out_lines` give these counts. The
channel controllers and the scheduler are sized from them.

## The journey of one window: the channel controller

`hbm_channel_ctrl` owns one PE's pseudo-channel and moves each window
through three phases. Its port `phase_id` shows the current phase.

| Phase | `phase_id` | What moves |
|---|---|---|
| WRITE_IN | 0 | The window's lines arrive from the host. They are cut into 256-bit beats (`stream_converter`, down direction) and written from byte address 0. |
| COMPUTE | 1 | The window is read back and reassembled into lines (`stream_converter`, up direction), then fed to the PE. At the same time, the PE's result lines are written right after the input, at `IN_LINES × 128` bytes. |
| DRAIN | 2 | The results are read back and sent to the host. |

The AXI3 traffic comes from two small helpers, `axi_wr_engine` and
`axi_rd_engine`:

- They issue INCR bursts of 16 beats (4 lines, 512 bytes), with one burst
  outstanding per direction.
- A default vertical-advection window costs 320 write bursts and 320 read
  bursts: 256 of each for the input and 64 for the result.
- The channel is the bottleneck. WRITE_IN needs at least four cycles per
  line, plus one address cycle and the memory latency per burst.

**Bypass.**

- `hbm_bypass_switch` sits between the host stream, the PE and the HBM
  paths.
- When the job's mode is *bypass*, the whole window is one BYPASS phase
  (`phase_id` 3). Host lines go straight into the PE and results go
  straight back, with no HBM traffic at all.
- The mode is latched when a window's first line arrives, so it can never
  change in the middle of a window.
- In HBM mode, the same switch steers the HBM write path (from the host
  or from the PE) and the read path (to the PE or to the host) according
  to the phase.

Every memory address comes from counters inside the controller. The host
never sees HBM addresses.

## The vertical-advection PE

This is the most involved part of the design. It is the `pe` module with
`KERNEL = KERNEL_VADVC`, and it chains three blocks:
`field_splitter` → `vadvc_engine` → `window_degrid`.

**The solver.** Each column holds a tridiagonal system
`a_k x_{k-1} + b_k x_k + c_k x_{k+1} = d_k`. It is solved with the Thomas
algorithm:

```
forward,  k = 0 .. D-1:  m = b_k - a_k c'_{k-1}      (m = b_0 at k = 0)
                         c'_k = c_k / m
                         d'_k = (d_k - a_k d'_{k-1}) / m
backward, k = D-1 .. 0:  x_k = d'_k - c'_k x_{k+1}    (x = d' at the top)
```

**Field splitter.** The window arrives as one stream in which the fields
are interleaved. `field_splitter` counts lines and routes each one into a
small per-field FIFO. The engine can then take `a`, `b`, `c` and `d` of
one column group in the same cycle.

**Engine.** `vadvc_engine` processes one column group (32 columns) at one
level per cycle, using 32 copies of `vadvc_lane`:

- **Forward sweep:** `DEPTH · GROUPS` cycles, while all four fields are
  valid. Each step writes `c'` and `d'` for its (level, group) into the
  *intermediate buffer*: two RAMs of `GROUPS · DEPTH` lines. The next
  level of the same group reads them back `GROUPS` entries earlier.
- **Backward sweep:** `DEPTH · GROUPS` cycles, while the output is ready.
  It walks the levels from top to bottom and reads the buffer in reverse.
  It keeps `x_{k+1}` of every group in a `GROUPS`-entry register.
- **Handover:** the backward sweep starts on the cycle after the last
  forward step. The next window's forward sweep starts on the cycle after
  the last backward line is taken.

A window therefore occupies the engine for `2 · DEPTH · GROUPS` = 512
cycles. The two sweeps of one window do not overlap.

**Degridding.** The backward sweep produces the top level first.
`window_degrid` collects the whole result window into a buffer, writing
level `k` to slot `DEPTH-1-k`. It then emits the window in input order.

**Arithmetic cost.** Each lane contains three dividers, three multipliers
and three adders, all combinational. This is the part a synthesis flow
would have to pipeline to reach a high clock rate; see *Departures and
limits*.

## The horizontal-diffusion PE

This is the `pe` module with `KERNEL = KERNEL_HDIFF`, a single
`hdiff_engine`. For each interior point:

```
lap(c,r) = 4 s(c,r) - (s(c+1,r) + s(c-1,r) + s(c,r+1) + s(c,r-1))
fc  = lap(c+1,r) - lap(c,r)     fcm = lap(c,r) - lap(c-1,r)
fr  = lap(c,r+1) - lap(c,r)     frm = lap(c,r) - lap(c,r-1)
out = s(c,r) - C1 * ((fc - fcm) + (fr - frm))
```

Each output reads the 13 points within Manhattan distance 2. Points
closer than two to the plane edge are the halo and are copied unchanged.

The engine works plane by plane:

- It first loads a plane (`ROWS` cycles) into a fully partitioned
  register array, so that every row is readable in the same cycle.
- It then emits one 32-point row per cycle, using 32 copies of
  `hdiff_lane`. Each lane recomputes the five Laplacians it needs.

The default `C1` is 0.25.

## Floating point

`fp32_pkg` provides IEEE-754 binary32 add, subtract, multiply and divide
as combinational functions:

- They round to nearest even.
- Subnormal inputs and results are flushed to signed zero.
- Infinities and NaNs propagate as a quiet NaN or an infinity.

The testbench reference (`tb_fp_pkg`) computes in double precision and
rounds once to float32. For one operation this gives the correctly
rounded result, so the RTL must match it bit for bit.

## Jobs, the scheduler and the register bus

The host talks to `job_manager` through a simple register bus (a
stand-in for AXI-Lite, one access per cycle, read data one cycle later).
Addresses are word addresses:

| Addr | Name | Access | Meaning |
|---|---|---|---|
| 0 | CTRL | W | bit 0 = 1: enqueue a job with the current NUM_WINDOWS and MODE |
| 1 | STATUS | R/W | bit 0 running, bit 1 done, bit 2 queue full, bit 3 queue empty; writing bit 1 = 1 clears *done* and the interrupt |
| 2 | NUM_WINDOWS | R/W | windows in the next job |
| 3 | MODE | R/W | bit 0 = 1: bypass HBM |
| 4 | JOBS_DONE | R | jobs completed since reset |

Queueing and dispatch:

- Up to `QUEUE_DEPTH` (4) jobs wait in a queue. A full queue ignores
  CTRL writes.
- A job is dispatched when the previous one has finished, at most two
  cycles later.
- On completion the *done* flag, which is the `irq` output, is set.

`stream_scheduler` executes one job at a time:

- Window `w` of the job goes to PE `w mod NUM_PE`, counting from PE 0 for
  each job.
- Results are collected in the same round-robin order. The output leaves
  in window order without any reordering memory.
- The input and output sides advance independently. While early windows
  compute, later ones are still arriving.

Two `cacheline_buffer` FIFOs of 64 lines decouple the host streams from
the scheduler, on the way in and on the way out.

## Top level

`nero_top` has the following parameters. The defaults are the
vertical-advection configuration.

| Parameter | Default | Meaning |
|---|---|---|
| `KERNEL` | `KERNEL_VADVC` | PE type |
| `NUM_PE` | 14 | PEs and HBM pseudo-channels |
| `GROUPS` | 4 | vadvc column groups of 32 per window |
| `DEPTH` | 64 | vadvc levels |
| `ROWS` | 64 | hdiff rows per plane |
| `PLANES` | 8 | hdiff planes per window |
| `BUF_DEPTH` | 64 | host-side buffer lines |

For horizontal diffusion, set `KERNEL = KERNEL_HDIFF` and `NUM_PE = 16`.

Ports:

- `mmio_*` and `irq`: the register bus.
- `host_in_*` and `host_out_*`: 1024-bit valid/ready streams from and to
  the host DMA.
- `hbm_req[NUM_PE]` and `hbm_rsp[NUM_PE]`: one simplified AXI3 master per
  pseudo-channel. The struct types are in `nero_pkg`.
- `pe_windows_done[NUM_PE]`: per-PE window counters.

All resets are synchronous and active low. All streams use the usual
valid/ready rule: a transfer happens on a clock edge where both are high,
and valid, once raised, is held with stable data until taken.

## Departures and limits

The following are this design's choices, or points where the source
description was silent.

- **Coefficients.**
  - The vertical-advection engine is a generic Thomas solver that takes
    `a, b, c, d` as inputs.
  - How the weather model forms these coefficients from its own fields
    (wind, velocity stage, tendencies) is not specified. The host, or a
    future front end in the PE, must supply them.
- **Laplacian weights and C1.**
  - The five-point Laplacian weights (4, −1, −1, −1, −1) are the usual
    ones and are assumed.
  - The diffusion coefficient `C1` is a parameter that defaults to 0.25.
- **Two corrections to the published flux pseudo-code.**
  - The row flux `frm` uses the Laplacian one row back.
  - The update subtracts `C1` times the *sum* of both flux differences.
- **Lane count.**
  - A horizontal-diffusion window is one cache line (32 points) wide,
    where the reference tile is 16 wide.
  - The vertical-advection tile 64 × 2 × 64 maps to `GROUPS = 4`,
    `DEPTH = 64`.
- **No pipelining of the float units.** The datapaths are combinational
  between registers. They are functionally exact, but a real build
  at 250 MHz would need pipelined operators. The rate figures below are in
  cycles, not nanoseconds.
- **Phase-serial channel.** Write-in, compute and drain of a window run
  one after the other in each channel. Successive windows of a PE do not
  overlap. Parallelism comes from the many PEs.
- **Intermediate buffer.** It is a RAM read in reverse, not a FIFO,
  because the backward sweep consumes the forward results in reverse
  level order.
- **Not built.**
  - The link layers, DMA engine, HBM controller and host software.
  - Half-precision datapaths.
  - The copy stencil used only to measure bandwidth.
  - The offline window-size tuner.
- **Lint warnings.**
  - Some status signals are left unconnected at the top: buffer
    occupancy, channel `busy` and phase, and the engine's
    backward-sweep flag. They exist for debugging.
  - The wide quotient in the divider has unused upper bits.

## Capacity at the default size

- A 256 × 256 × 64 grid is 512 vertical-advection windows, about 37 per PE
  on 14 PEs.
- Each window uses 160 KiB of its 256 MiB pseudo-channel.
- On chip, each PE holds:
  - a 64 KiB intermediate buffer;
  - a 32 KiB result buffer;
  - field FIFOs of 4 × 8 lines.
- Domains from 64 × 64 × 64 to 1024 × 1024 × 64 only change the window
  count (32 to 8192). The 32-bit NUM_WINDOWS register covers them all.

## Verification

Every block has a self-checking testbench in `tb/`. Each testbench:

- compares every output with an independently computed reference;
- ends by printing `TB_RESULT checks=<n> failures=<n>`;
- has a cycle watchdog.

The testbenches use random input gaps and output backpressure throughout.
Shared helpers:

- `tb_fp_pkg`: the float32 reference.
- `tb_nero_ref_pkg`: random diagonally dominant tridiagonal windows and
  random diffusion planes, with their expected results.
- `hbm_axi_model`: a behavioural HBM pseudo-channel with latency, random
  stalls and burst counters.

| Testbench | Size simulated | What it checks |
|---|---|---|
| `fp32_pkg_tb` | – | 80 000 random and corner-case operations, bit-exact |
| `cacheline_buffer_tb` | 1024-bit, depth 64 | order, full/empty, occupancy |
| `stream_converter_tb` | 1024↔256 | beat order both ways, one beat per cycle |
| `field_splitter_tb` | 4 fields | routing of interleaved lines |
| `vadvc_engine_tb` | 4 lanes, 2 groups, 8 levels | solution bit-exact; sweep lengths of `DEPTH·GROUPS` cycles |
| `window_degrid_tb` | – | level reversal |
| `hdiff_engine_tb` | 8 lanes, 8 rows | every point bit-exact, halo copy |
| `pe_tb` | 32 lanes, 2 groups, 8 levels / 8 rows | both PE kinds, two windows each |
| `hbm_bypass_switch_tb` | – | routing table in both modes, mode latching |
| `hbm_channel_ctrl_tb` | 8-line windows | data through HBM, burst counts, no HBM traffic in bypass, phase order, ≥ 4 cycles per line in write-in |
| `stream_scheduler_tb` | 3 PEs | round robin, in-order output, job_done |
| `job_manager_tb` | queue of 4 | registers, queue full, dispatch order, interrupt |
| `nero_top_tb` | 2 PEs, 1 group, 4 levels | 3 jobs end to end (HBM, bypass, HBM) |

`nero_top_tb` also counts how often each mechanism occurs and fails if any
never happens:

- HBM write and read bursts on every channel;
- cycles in bypass mode;
- a job enqueued while another runs;
- output backpressure;
- windows finished by each PE;
- the interrupt.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/fp32_pkg.sv rtl/nero_pkg.sv tb/tb_fp_pkg.sv tb/tb_nero_ref_pkg.sv \
    tb/nero_top_tb.sv --top-module nero_top_tb -Mdir obj_nero_top_tb
./obj_nero_top_tb/Vnero_top_tb
```

Replace `nero_top_tb` with any other testbench name. Builds that contain
32-lane datapaths take a few minutes of C++ compilation.

**Largest size simulated.** The largest configuration that has run to
completion is:

- `nero_top_tb`: the whole accelerator with 2 PEs and windows of 32
  columns × 4 levels;
- `pe_tb`: full 32-lane PEs with 2 column groups × 8 levels and 8-row
  planes.

No testbench runs the top at its default size: 14 PEs with windows of
128 columns × 64 levels. A Verilator build of that configuration did not
finish its C++ compilation within 18 minutes on a four-core machine,
because the 448 combinational float32 lanes turn into a very large
model. At the default size the design is therefore checked only by lint
and elaboration. To try it, copy `nero_top_tb`, drop the parameter list
on `nero_top` and use the default window shape (`G = 4`, `D = 64`).
