# SPARC reconstructor: an FPGA adaptive-optics real-time controller in SystemVerilog

An adaptive-optics loop has to turn one camera frame from a Shack-Hartmann
wavefront sensor into one set of deformable-mirror commands before the next
frame arrives. The sensor divides the telescope pupil into an n x n grid of
subapertures. Each subaperture contributes two numbers, the x and y
displacement (the slope) of its spot. The mirror commands, one phase per
actuator of an (n+1) x (n+1) Fried-geometry mirror, are a matrix-vector
product of a fixed reconstruction matrix with the vector of 2n² slopes.

For n = 50 the matrix has 2601 rows and 5000 columns. At 16 bits per element
that is 26 MB, far too much for on-chip memory. This design therefore keeps
the matrix in two external DDR3 banks and streams it through the FPGA once per
frame. The multiply-accumulate array is sized so that it consumes the full
memory bandwidth. The other design choice that matters is timing. The design
does not wait for a whole frame of slopes: a matrix column can be multiplied
as soon as the slope it belongs to exists. Reconstruction therefore overlaps
pixel readout, and the frame finishes shortly after the last pixels arrive,
or shortly after the last matrix word, whichever comes later.

The RTL follows the architecture of the SPARC platform (Scalable Platform for
Adaptive optics Real-time Control, Part 2: FPGA implementation). Its block
names, state names and main sizes come from that description. Details the
description leaves open were filled in by this design. They are listed in
[What is this design's own](#what-is-this-designs-own).

## The data path

```
 camera ──► wfs_pixel_buffer ─► pixel_addressing ─► wpu_buffer ═╗      clk_pixel  (10 ns)
  16-bit pixel + enable            (bank/word/lane,   ITER banks ║
                                    ping-pong half)              ║
                           wpu_sm: ITER x cog_unit ◄════════════╝      clk_slope  (80 ns)
                                   │ ITER slope pairs per cycle
                                   ▼
                              slope_buffer ═══════════╗
                                                      ║
 host ─► ddr3_sm A ─► DDR bank A ─► recon_fifo A ═╗   ║                 clk_mem_a (5 ns)
 host ─► ddr3_sm B ─► DDR bank B ─► recon_fifo B ═╬═══╬══╗              clk_mem_b (5 ns)
                                                  ▼   ▼  ▼
                        core_reconstructor: state machine, phase_addr_unit,
                        mvm_unit (2 x LANES multipliers), phase_memory       clk_recon (20 ns)
                                                  │
                                                  ▼
                                  phase_valid / phase_index / phase_data ──► mirror
```

`═` marks a clock-region crossing. Every crossing is either a dual-clock
memory, which is written in one region and read in the other, or a free-running
16-bit progress counter. A counter is passed Gray-coded through two
flip-flops (`gray_sync`). Regions never exchange pulses or handshakes. Each
side compares counts instead, for example "rows of pixels written" against
"rows of slopes done". A count that arrives late only delays the reader; it
can never be misread.

### Pixels to slopes

Pixels arrive one per clock, in raster order over the whole sensor, as
N_SUB·PIX lines of N_SUB·PIX pixels. `pixel_addressing` works out which
subaperture each pixel belongs to. Subaperture s of the current row goes to
bank s mod ITER and word s div ITER, at lane py·PIX + px. After a full row of
subapertures (PIX sensor lines), every word holds one complete subaperture.
The ITER banks can then deliver ITER subapertures in one read. The buffer has
two halves. The camera fills row r+1 while the slope engine reads row r. A
third row that starts before row r has been freed sets the sticky
`pixel_overrun` flag.

`wpu_sm` waits until `rows_written` (synchronised) passes its own row count.
It then reads one word per cycle from all ITER banks and feeds ITER
combinational `cog_unit`s. Each unit computes a centre of gravity:

```
x = Σ I(px,py)·(2px − (PIX−1)) / (2·Σ I)      y likewise with py
```

This is the spot offset from the subaperture centre, in pixels. It is signed,
with 16 fraction bits in a 32-bit word. A zero-intensity subaperture gives 0.
The division is an unrolled restoring divider, a cascade of
subtract-and-select stages, so one subaperture takes one slope clock. A word
of ITER slope pairs is written to `slope_buffer` each cycle, and a counter
`words_written` publishes progress. At the defaults (N_SUB = 50, ITER = 16) a
row takes 4 slope cycles, which is 320 ns.

### The matrix in DDR and the reconstructor FIFOs

Bank A holds the columns that multiply x slopes, and bank B those that
multiply y slopes. Within a bank the matrix is stored column-major, in the
order the slopes are produced. For slope column c (c = row·N_SUB +
subaperture), the (n+1)² matrix rows are padded up to a multiple of LANES.
They are stored as CHUNKS wide words:

| quantity | formula | default |
|---|---|---|
| memory-controller word | D.W · nCK (MIG_W) | 512 bits |
| reconstructor word | MIG_W · NFIFO | 2048 bits |
| lanes per bank | MIG_W · NFIFO / 16 | 128 |
| matrix rows | (N_SUB+1)² | 2601 |
| CHUNKS (wide words per column) | ⌈(N_SUB+1)² / LANES⌉ | 21 |
| controller beats per slope row | N_SUB · CHUNKS · NFIFO | 4200 |
| matrix per bank | N_SUB² · CHUNKS · 2048 bits | 13.4 MB |

Each `ddr3_sm` first copies its bank's half of the matrix from the host
stream into DDR (WRITE_MATRIX), then raises `ddr_ready` (DDR_READY). After
that, every time the core requests a row (`rows_req`), it reads that row's
4200 beats (READ_MATRIX). It issues a read only while the reads in flight
are fewer than the free space `recon_fifo` reports. A controller that returns
data late therefore can never overflow the FIFO. A bank also never runs more
than one row ahead of the multiply-accumulate loop.

`recon_fifo` gathers NFIFO consecutive 512-bit beats into one 2048-bit word.
The first beat goes to the least significant bits. The FIFO then carries the
word into the reconstruction clock through an asynchronous FIFO with Gray
pointers. NFIFO is the ratio that makes the rates match. Four 512-bit beats
per 20 ns recon cycle is exactly the 200 MHz memory-side rate. One wide word
per bank per recon cycle is therefore the whole memory bandwidth.

### The multiply-accumulate loop

`core_reconstructor` is a four-state machine:

- **INITIALIZE** clears the phase memory. It waits for both banks' `ddr_ready`
  and for `loop_enable`, then starts one frame of pixel acquisition.
- **SLOPE_TRANSFER** waits until the first slope word of the next row is in
  the slope buffer. It then requests that row's matrix section from both
  banks.
- **MVM_CONTROL** runs one step per clock. A step takes one wide word from
  each FIFO, the slope pair of the current column and one phase-memory word of
  LANES phases, and writes back

  ```
  phase[r] += (A[r][c]·x[c] >>> 12) + (B[r][c]·y[c] >>> 12)     (32-bit, wrapping)
  ```

  `phase_addr_unit` walks the chunks of a column (inner loop) and then the
  columns (outer loop). One slope pair is therefore reused for CHUNKS
  consecutive steps.
- **PHASE_OUTPUT** streams the (n+1)² phases out, one per clock, as
  `phase_valid`, `phase_index` and `phase_data`. It clears each phase-memory
  word as it goes, pulses `frame_done` and returns to INITIALIZE.

A step fires only when three things are present:

- the slope of its column, as counted by `words_written`;
- a word in FIFO A;
- a word in FIFO B.

Otherwise the loop stalls. The core flags the cause:

- `stall_slope`: waiting for slopes;
- `stall_mem`: waiting for the matrix;
- `bank_skew`: one bank has delivered and the other has not.

The step has a two-stage pipeline. The first cycle registers the FIFO words
and the slope and reads the phase word. The second cycle adds and writes back.
A column that fits in a single phase word (CHUNKS = 1) reads the word being
written, and the phase memory's write-first bypass handles that case
(`phase_bypass`).

### Which side waits

The one stall rule covers the two regimes the SPARC description distinguishes:

- **Small systems.** Fetching a row's matrix takes less time than reading the
  next row's pixels. The loop finishes each row early and then waits in
  SLOPE_TRANSFER or on `stall_slope`. The frame ends almost as soon as the
  last pixel row is in.
- **Large systems**, such as 50 x 50. A row of slopes takes 4 slope cycles
  (0.32 µs). A row of matrix takes N_SUB·CHUNKS = 1050 recon cycles
  (21 µs). Slopes run ahead, and the loop is limited by memory bandwidth
  (`stall_mem`). A frame then needs N_SUB²·CHUNKS = 52 500 steps, which is
  1.05 ms at 50 MHz. The published prototype reports 1.283 ms for this size,
  of which about 1 ms is matrix fetch. The full-size simulation of this RTL
  measures 1.26 ms from the first pixel to the last phase.

Because the whole frame's slopes are kept in `slope_buffer` (N_SUB·⌈N_SUB/ITER⌉
words), slope computation never has to wait for the loop. The camera side
waits for nobody: it is only checked, through the `pixel_overrun` flag.

## Number formats

| signal | width | format |
|---|---|---|
| pixel | 16 | unsigned |
| slope | 32 | signed, 16 fraction bits, unit = one pixel |
| matrix element | 16 | signed, 12 fraction bits (Q3.12) |
| phase | 32 | signed, same scale as slope (the product is shifted right by 12) |

Only the widths (16-bit pixels and matrix elements, 32-bit slopes and
phases) come from the SPARC description. It reports that the residual error
stops improving beyond 8 fraction bits of matrix precision. The split of
these widths into integer and fraction bits is this design's choice. Change
`MAT_FRAC` and `SLOPE_FRAC` in `sparc_pkg` to move it.

## Parameters

`sparc_top` parameters, with defaults matching the 50 x 50 configuration that
the SPARC prototype was measured in:

| parameter | default | meaning |
|---|---|---|
| N_SUB | 50 | subapertures per side (n) |
| PIX | 4 | pixels per subaperture side |
| ITER | 16 | slopes computed per slope clock |
| MIG_W | 512 | memory-controller data word (D.W · nCK = 64 · 8) |
| NFIFO | 4 | controller words per reconstructor word |
| ADDR_W | 28 | controller address width |
| FIFO_DEPTH | 16 | wide words per reconstructor FIFO |

LANES and CHUNKS are derived from these values. Resources scale as follows:

- The logic depends on ITER (centroid units) and on MIG_W·NFIFO (multipliers).
- The memories depend on N_SUB.

Every memory is sized from the parameters. ITER need not divide N_SUB; the
last slope word of a row is then only partly used. Simulated sizes range from
N_SUB = 4 to 50, with ITER = 4, 8 and 16 and MIG_W·NFIFO = 512 and 2048.

## Top-level interface

| group | ports | clock |
|---|---|---|
| clocks, reset | `clk_pixel`, `clk_slope`, `clk_recon`, `clk_mem_a`, `clk_mem_b`, `arst_n` (asynchronous assert, synchronised release per region) | |
| camera | `pix_data[15:0]`, `pix_en` | clk_pixel |
| host matrix, per bank | `mw?_valid`, `mw?_data`, `mw?_ready`: the bank's words in DDR order (column-major, as in the table above) | clk_mem_? |
| memory controller, per bank | `?_calib_done`, `?_app_en`, `?_app_cmd` (0 write, 1 read), `?_app_addr`, `?_app_rdy`, `?_app_wdf_wren`, `?_app_wdf_data`, `?_app_wdf_rdy`, `?_app_rd_data`, `?_app_rd_data_valid` | clk_mem_? |
| mirror | `phase_valid`, `phase_index`, `phase_data` (signed), `frame_done` | clk_recon |
| control | `loop_enable` | clk_recon |
| status | `ddr_ready`, `stall_slope`, `stall_mem`, `bank_skew`, `phase_bypass` (clk_recon); `pixel_overflow`, `pixel_overrun`, `acquiring` (clk_pixel); `computing_slopes` (clk_slope); `fifo_overflow` | |

The memory-controller port is a simplified form of a vendor DDR3 controller's
user interface. A command is accepted when `app_en` and `app_rdy` are both
high. Write data goes with the write command, and read data returns in order,
after any delay, with `app_rd_data_valid`. Read data feeds the reconstructor
FIFO directly.

## Verification

Every block has a self-checking testbench in `tb/`. Each one compares against
a model written independently in the testbench, has a watchdog, and ends by
printing `TB_RESULT checks=… failures=…`.

| testbench | what it checks |
|---|---|
| tb_cog_unit | random and corner-case subapertures against an integer centre-of-gravity model |
| tb_mvm_unit | every lane against the MAC equation, random and extreme values |
| tb_wfs_pixel_buffer | FIFO order, back-pressure and the overflow flag against a clocked model |
| tb_pixel_addressing | bank/word/lane/half of every pixel over two frames, including a forced overrun |
| tb_wpu_buffer | dual-clock writes by lane, reads of whole words from both halves |
| tb_wpu_sm | slope words and addresses for a whole frame against the model |
| tb_slope_buffer | random writes and reads across the two clocks |
| tb_recon_fifo | beat gathering, order, free-space count, back-pressure across clocks |
| tb_phase_memory | random traffic including same-address read/write (bypass) |
| tb_phase_addr_unit | address sequence and end-of-column/row/frame flags |
| tb_ddr3_sm | matrix copy into the memory model, the exact read address sequence per row, flow control with a random-latency model |
| tb_core_reconstructor | whole MAC loop for a small system with random FIFO and slope arrival; counts each stall kind and the bypass |
| tb_sparc_top | end to end at N_SUB = 4, PIX = 4, ITER = 4, 256-bit words, NFIFO = 2: two frames, the first with slow pixels (MAC waits for slopes), the second at full pixel rate with slow memory (slopes run ahead) |
| tb_sparc_top_full | end to end with every parameter at its default: one 50 x 50 frame, 40 000 pixels, 2 x 210 000 matrix beats, all 2601 phases checked, frame time between the 1.05 ms bandwidth bound and the prototype's 1.283 ms |
| tb_sparc_top_workloads | six complete systems side by side, one frame each: 11, 16, 21, 32 and 42 subapertures per side with 16 slopes per clock, and 12 x 12 with 8 slopes per clock; other parameters at their defaults |

The end-to-end testbenches compute the expected phases from first principles:
centre-of-gravity slopes, then the MAC equation over all columns. They also
count each mechanism and fail if one never occurs:

- waits for slopes;
- slopes of a row completed while the loop was still behind;
- waits for memory;
- bank skew;
- phase-memory bypass;
- frames looped.

Measured frame times (first pixel to last phase, pixel clock 10 ns, memory
models with 8 to 24 cycles of read latency):

| system | frame time | limited by |
|---|---|---|
| 11 x 11 | 23.6 µs | pixel readout (19.4 µs); the last row's MVM ends 1.3 µs after the last pixel |
| 12 x 12, 8 slopes/clock | 27.8 µs | pixel readout; last row's MVM ends 1.37 µs after the last pixel, inside the 1.84 µs that the published 12 x 12 example leaves for it |
| 16 x 16 | 48.6 µs | pixel readout |
| 21 x 21 | 83.0 µs | pixel readout |
| 32 x 32 | 243 µs | matrix bandwidth (9216 steps) |
| 42 x 42 | 655 µs | matrix bandwidth (26 460 steps) |
| 50 x 50 | 1.26 ms | matrix bandwidth (52 500 steps); the published prototype reports 1.283 ms |

Each time includes the (n+1)² cycles of phase output. The crossover between
the two regimes lies between 21 and 32 subapertures per side. Below it,
reconstruction of a frame finishes about a microsecond after its last pixel.

`ddr_mig_model` in `tb/` is a behavioural stand-in for the memory controller
and its DRAM. It has calibration delay, random `app_rdy`/`app_wdf_rdy`
back-pressure and random in-order read latency.

Each testbench is a single top module; `sparc_pkg` is compiled first. To run
one with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
          rtl/sparc_pkg.sv tb/tb_sparc_top.sv --top-module tb_sparc_top
./obj_dir/Vtb_sparc_top
```

`tb_sparc_top_full` (the 50 x 50 run) and `tb_sparc_top_workloads` each
simulate in a few seconds once built. The simulator has two
states. The testbenches initialise everything they read, so results do not
depend on random initial values.

## What is this design's own

The SPARC description gives the block structure, the state names, the
multiply-accumulate equation, the lane and FIFO widths and the sizes above.
The following are this design's decisions:

- **Pixel order and buffer layout.** Raster order over the sensor, with a
  bank/word/lane mapping and a ping-pong WPU buffer. The description says only
  that the camera controller delivers pixels "in the correct order" and that
  the buffer allows parallel readout.
- **Centre-of-gravity formula and fixed-point formats**, as listed above.
- **Matrix layout in DDR.** Column-major per bank, with each column padded to
  LANES rows. The host must write the matrix in this order.
- **x/y bank assignment.** One figure of the description pairs the x slope
  with the second half of the matrix columns (ncol + n²). Its equation and
  text pair the x slope with the first half, stored in bank A. This RTL
  follows the equation: bank A elements multiply x slopes, bank B elements
  multiply y slopes.
- **Arithmetic.** Products are shifted right by the matrix fraction bits and
  truncated; sums wrap. Rounding and saturation are not implemented.
- **Clock-domain crossings.** Progress counters are passed Gray-coded, and
  each reconstructor FIFO is an asynchronous FIFO.
- **Flow control and status flags.** Reads are gated by the FIFO's free
  space. The status flags (`pixel_overrun`, overflow, stall and skew
  indicators) are additions.
- **Phase output.** One phase per recon clock with its index. Conversion to
  actuator commands is left outside, as in the original platform.
- **Memory-controller interface.** The interface is simplified, and the
  controller itself (calibration, refresh, DDR3 PHY) is outside this RTL.
- **Clock rates.** The four frequencies come from the published prototype.
  They are 100 MHz pixel, 12.5 MHz slope (set by the divider) and 50 MHz
  reconstruction. The memory side runs at 200 MHz with 512-bit words, from a
  64-bit DDR3-1600 module. The RTL does not depend on them. Only the ratio
  NFIFO = memory-side rate / reconstruction rate has to hold for the memory
  bandwidth to be used in full.

Not included: the camera and its controller, the DDR3 controllers and DRAM,
the host (PCIe) link that loads the matrix, and the deformable-mirror
interface. Their signals are top-level ports.

## Files

`rtl/`:

- `sparc_pkg.sv`: shared constants, size functions and the slope-pair type.
- One file per block, as named above.
- Helpers: `gray_sync.sv`, `level_sync.sv` and `reset_sync.sv`.
- `sparc_top.sv`: the top level.

`tb/`: one testbench per block, the two end-to-end testbenches, and the
memory-controller model. Every file opens with a comment that explains it.
