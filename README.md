# A stereo-vision accelerator: one systolic array for DNNs, block matching and optical flow

Stereo depth estimation finds, for every pixel of the left camera image, the
matching pixel in the right image. The horizontal offset between the two is
the *disparity*, and depth is inversely proportional to it. Stereo DNNs give
the best disparity maps but cost billions of operations per frame. Classic
search methods are far cheaper, but less accurate.

The accelerator here combines the two, one frame at a time:

* **Key frames** (one frame in every window of PW frames, PW = 4 by
  default) run a full stereo DNN. Its layers are convolutions and
  deconvolutions.
* **Non-key frames** do not run the DNN. They take the last disparity
  map, move each correspondence along the motion of the two images, and
  refine the result with a short block-matching search.
  * The motion is found by dense optical flow (Farneback's method).
  * The search compares blocks by their sum of absolute differences (SAD).

Almost all of the work in both frame types has the shape of a convolution, so
one array of processing elements (PEs) serves both:

* multiply-accumulate (MAC) for DNN layers and for Gaussian blur;
* accumulate-absolute-difference for block matching.

The remaining per-pixel work runs on a small scalar unit. The per-pixel work
covers activation, pooling, the two optical-flow steps, finding the best
match, and propagation.

Deconvolution layers need no special hardware. Offline software splits each
deconvolution kernel into dense sub-kernels, and each sub-kernel is run as an
ordinary convolution. The results of the sub-kernels are then interleaved into
the output feature map by strided stores. Everything that decides *what* to
run belongs to that offline software:

* layer mapping;
* tiling;
* buffer partitioning;
* the sub-kernel split.

The hardware only runs a program of coarse instructions.

## Block diagram

```
                 +------------------------------------------------+
 imem_*, cfg_*   |  asv_controller  (micro-sequencer, key frames) |
 frame_start --->|  OP_DMA | OP_GEMM | OP_SCALAR | OP_SYNC | END  |
                 +-----+-------------+--------------+-------------+
                       |dma_job      |gemm_job      |scalar_job
                 +-----v----+  +-----v---------+  +-v-------------------+
  dram_* <------>| asv_dma  |  |asv_array_engine| | asv_scalar_unit     |
  (off-chip      |          |  | + 24x24        | | 8 x asv_scalar_lane |
   memory ctrl)  |          |  | asv_systolic_  | | + asv_argmin        |
                 |          |  |   array (PEs)  | | (ce: 1 cycle in 4)  |
                 +-----+----+  +-----+----------+ +-+-------------------+
                   port 2          port 0            port 1
                 +-----v--------------v-----------------v------------------+
                 | asv_global_buffer: 12 banks x 64K x 16 bit = 1.5 MB      |
                 | bank = addr[19:16]; fixed priority port 0 > 1 > 2        |
                 +----------------------------------------------------------+
```

Everything runs on one clock, nominally 1 GHz. The scalar lanes advance only on
every fourth cycle, which gives the 250 MHz scalar rate without a second clock
domain.

## Data formats

* Pixels, activations and weights are 16-bit signed values.
* The PE multiplies two 16-bit operands into a 32-bit accumulator.
* When a result is written back to the buffer, it is shifted right
  arithmetically by the job's `shift` field and saturated to 16 bits. `shift`
  is where software places the fixed-point binary point of each layer.
* The scalar lanes use **Q8.8**: 8 integer bits and 8 fraction bits. Flow
  vectors (dx, dy) are in pixels in Q8.8, so `floor(dx)` is `dx >>> 8`.
* The buffer and the DMA move single 16-bit words. Buffer addresses are
  20-bit word addresses. DRAM addresses are 32-bit word addresses.

## The PE array and one array job

This is the hardest part of the design to follow, so it gets the most space.

### Dataflow

The array is **output-stationary**: PE (i, j) owns output element C[i][j] for
the whole job.

* Row i of A enters from the west and moves one PE east per cycle.
* Column j of B enters from the north and moves one PE south per cycle.
* Both streams are *skewed*: row i starts i cycles late and column j starts j
  cycles late. The skew makes A[i][k] and B[k][j] meet in PE (i, j) in the
  same cycle.

In each enabled cycle a PE does one of two things:

```
MAC mode:  acc += a * b           (convolution, Gaussian blur)
SAD mode:  acc += |a - b|         (block matching cost)
```

A dot product of K terms is complete in every PE after **K + ROWS + COLS − 2**
enabled cycles. The term ROWS + COLS − 2 is the time for the skew to reach the
far corner.

### Draining the results

The results then leave through the bottom of the array. With `drain` high,
every accumulator loads the accumulator of the PE above it. The bottom row
appears on `south_acc`, and each further drain step brings up the next row.

### The sequencer: `asv_array_engine`

`asv_array_engine` turns one `gemm_job_t` into this sequence:

1. **LOAD_A**: read a chunk of the M × K operand matrix A from the buffer
   into local row stores.
2. **LOAD_B**: read the matching chunk of the N × K matrix B into local
   column stores.
3. **CLEAR**: clear all accumulators. This happens before the first chunk
   only.
4. **STREAM**: feed both stores, skewed, for exactly Kc + ROWS + COLS − 2
   cycles, where Kc is the chunk length. If K has more terms left, go back
   to step 1 for the next chunk.
5. **WRITE / DRAIN**: write the bottom row, one word per cycle, then drain one
   step, and repeat. Rows with m ≥ M are drained without being written.

The local stores hold KMAX = 256 terms per row and column, so a chunk is at
most 256 terms long. A layer with 3 × 3 kernels over 512 channels (K = 4608)
therefore runs as 18 chunks inside one job. The accumulators keep their sums
between chunks, so the full 32-bit sum is formed before the single
shift-and-saturate at write-back.

Loads and writes go through the global buffer at one word per cycle. A request
that is not granted (a bank conflict) is held, and the stall is counted.

### Addressing

```
A(m, k) at a_base + m*a_stride + k
B(k, n) at b_base + n*b_stride + k
C(m, n) at o_base + m*o_rstride + n*o_cstride
```

Limits: M ≤ 24, N ≤ 24, K ≤ 65535.

### Mapping the workloads onto a job

**Convolution.** A is an im2col tile: one row per output pixel, holding the
input window. B holds one row per filter.

**Block matching.** A holds one row per candidate window in the right image. B
holds one row per left-image block. The mode is SAD, and the result C[m][n] is
the matching cost of candidate m for block n. With `o_rstride = 1` and
`o_cstride = 24`, the costs of each left block land contiguously in memory,
ready for the arg-min search.

**Deconvolution (the "gather").** Take a stride-2 deconvolution. Each of its
four output phases (even/odd row × even/odd column) is an ordinary
convolution with one sub-kernel. Software issues one job per sub-kernel over
the *same* input tile, which the DMA fetched into the buffer once. Each job writes
with strides that place its outputs on its own phase of the output map. For
example:

* `o_rstride = 4`, `o_cstride = 2`, `o_base = X` for one phase;
* the same strides with `o_base = X + 1` for the other.

Together the two jobs fill X … X+4M−1 with no gaps. The interleaving costs no
extra pass: it is just the address pattern of the write-back.

### Timing of one job

Each load phase takes at least one cycle per word read. Each STREAM takes
exactly Kc + 46 cycles at the default size, which adds up to K + 46 per chunk
count. The write phase takes
M × N + (24 − M) + 24 cycles, counting writes and drain steps. A job of c chunks therefore takes roughly
(M + N)·K + K + 46·c + M·N + 48 cycles when there are no conflicts. Loading
dominates, which is why the offline schedule reuses a loaded tile for as many
outputs as it can.

## The scalar unit

`asv_scalar_unit` runs one `scalar_job_t` over `count` items in three steps:

1. It gathers the operands of up to 8 items from the buffer.
2. It starts all 8 `asv_scalar_lane`s together.
3. It scatters the results to `dst + item*n_out + slot`.

Buffer traffic runs at the full clock. Only the lane arithmetic uses the slow
enable (`ce`, one cycle in four).

| op | inputs per item | outputs | lane steps | meaning |
|---|---|---|---|---|
| `SC_RELU` | 1 | 1 | 1 | max(x, 0) |
| `SC_MAX2` | 2 | 1 | 1 | one pooling step, max(a, b) |
| `SC_PROP` | 3 | 1 | 1 | propagated disparity D + dxR − dxL |
| `SC_MATUPD` | 12 | 5 | 2 | optical-flow Matrix Update |
| `SC_FLOW` | 5 | 2 | 51 | optical-flow Compute Flow |
| `SC_ARGMIN` | `group` costs | 1 | — | best disparity of a block |

### Matrix Update

Farneback's method describes the neighbourhood of each pixel by quadratic
polynomial coefficients (b1, b2, a11, a22, a12).

The inputs are:

* the coefficients R0 of the current frame at the pixel;
* the coefficients R1 of the previous frame at the pixel displaced by the
  current flow estimate;
* the flow estimate (dx, dy) itself.

Matrix Update first checks whether the displaced pixel
(x + ⌊dx⌋, y + ⌊dy⌋) lies in [0, width−2] × [0, height−2]. If it does not,
R1 is taken as zero. This is the "boundary check" hardware. It then forms:

```
a11 = (R0.a11 + R1.a11)/2    a22 = (R0.a22 + R1.a22)/2    a12 = (R0.a12 + R1.a12)/4
b1  = (R0.b1 − R1.b1)/2 + a11·dx + a12·dy
b2  = (R0.b2 − R1.b2)/2 + a12·dx + a22·dy
out = (g11, g12, g22, h1, h2)
    = (a11² + a12², (a11 + a22)·a12, a22² + a12², a11·b1 + a12·b2, a12·b1 + a22·b2)
```

The scalar unit tracks the pixel coordinates (x, y) of each item from the job's
`width`. Blurring the five outputs over a window is an ordinary MAC convolution
on the array.

### Compute Flow

Compute Flow solves the 2 × 2 system [g11 g12; g12 g22]·(dx, dy) = (h1, h2):

```
det = g11·g22 − g12² + 2^-10
dx  = (g22·h1 − g12·h2) / det
dy  = (g11·h2 − g12·h1) / det
```

Two restoring dividers (48-bit dividend, 34-bit divisor) produce one quotient
bit per lane step. That is why the operation takes 51 steps: one to load the
dividers, 48 quotient bits, one to see them finish and one to apply the sign. The 8
lanes run in parallel, so 8 flow vectors take barely longer than one.

### Arg-min

`SC_ARGMIN` streams `count` groups of `group` SAD costs through `asv_argmin`.
It writes `disp_base + index` of the lowest cost in each group, and on a tie the
earliest candidate wins. With `disp_base = −12`, the 24 candidates cover
disparity offsets −12 … +11 around the propagated estimate.

## Global buffer and DMA

The buffer has 12 single-port banks of 65,536 16-bit words, 128 KB each, for
1.5 MB in total. Address bits [19:16] select the bank.

Three clients share it through fixed priority:

| port | client | priority |
|---|---|---|
| 0 | array engine | highest |
| 1 | scalar unit | middle |
| 2 | DMA | lowest |

A request that loses is not granted. The client holds it until it is granted,
and `stat_buf_conflicts` counts every lost cycle. Read data returns one cycle
after the grant.

The software splits the buffer between key-frame data (ifmap, weights, ofmap)
and non-key-frame data (frames, flow, disparity). Clients working in different
banks never interfere.

`asv_dma` copies `len` consecutive words in either direction between DRAM and
the buffer, one word at a time.

* Its DRAM side is a simple request/grant port, with read data returned later
  on `dram_rvalid`.
* Off-chip memory, its controller and the PHY are outside this RTL.
* The DMA runs in parallel with the array. A program can therefore fetch the
  next tile while the current one computes (double buffering).

## The micro-sequencer and its program

`asv_controller` holds IMEM_DEPTH = 256 instructions, written through
`imem_we / imem_addr / imem_wdata`. Each instruction (`instr_t`) has an opcode,
a `wait_done` flag, and a 200-bit payload holding one job struct,
right-aligned.

| opcode | effect |
|---|---|
| `OP_DMA`, `OP_GEMM`, `OP_SCALAR` | hand the payload job to its unit |
| `OP_SYNC` | wait until all units are idle |
| `OP_END` | wait until all units are idle, then pulse `frame_done` |
| `OP_NOP` | nothing |

Issue rules:

* Instructions issue in order, one per cycle at most.
* If the target unit is still busy, issue stalls, and `stat_issue_stalls`
  counts the cycles.
* With `wait_done` set, the controller also waits for that job's completion
  before the next instruction.

**Choosing key frames.** `frame_start` begins a frame.

* A window counter makes the first frame of every window of `cfg_pw` frames a
  key frame. `cfg_pw = 0` selects the parameter PW = 4. Setting `cfg_pw = 2`
  gives the PW-2 schedule.
* A key frame starts at `cfg_key_pc`. A non-key frame starts at
  `cfg_nonkey_pc`.
* `frame_is_key` holds the choice for the duration of the frame.

## Files

| file | contents |
|---|---|
| `rtl/asv_pkg.sv` | widths, job and instruction structs, buffer port structs, `sat16` |
| `rtl/asv_pe.sv` | one PE (MAC / absolute difference, 32-bit accumulator, drain) |
| `rtl/asv_systolic_array.sv` | ROWS × COLS grid of PEs |
| `rtl/asv_array_engine.sv` | array job sequencer (load, stream, drain, strided write) |
| `rtl/asv_scalar_lane.sv` | one scalar lane |
| `rtl/asv_udiv.sv` | restoring divider used by Compute Flow |
| `rtl/asv_argmin.sv` | streaming arg-min for block matching |
| `rtl/asv_scalar_unit.sv` | 8 lanes plus arg-min, gather / scatter |
| `rtl/asv_sram_bank.sv` | single-port SRAM bank (array model) |
| `rtl/asv_global_buffer.sv` | banked buffer with priority arbitration |
| `rtl/asv_dma.sv` | DRAM ↔ buffer copy engine |
| `rtl/asv_controller.sv` | micro-sequencer and key-frame selection |
| `rtl/asv_top.sv` | the accelerator |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/asv_tb_ref_pkg.sv` | integer reference models of Matrix Update and Compute Flow |
| `tb/asv_tb_mem.sv` | behavioural buffer port with random grant delays |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops. Each has a
watchdog. For example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_asv_top \
  -y rtl -y tb +libext+.sv rtl/asv_pkg.sv tb/asv_tb_ref_pkg.sv tb/tb_asv_top.sv
./obj_dir/Vtb_asv_top
```

Replace `tb_asv_top` with any other testbench. The package files must come
first.

### The end-to-end test

`tb_asv_top` runs the accelerator at its full default size: 24 × 24 PEs,
8 lanes, 1.5 MB buffer, PW = 4. It uses a behavioural DRAM with random
latency, runs five frames (key, non-key, non-key, non-key, key), and compares
every result word in DRAM with a reference computed in the testbench.

* **Key-frame program:**
  1. Load an ifmap tile and filters.
  2. Run a 24 × 8 × 18 convolution, while the DMA prefetches deconvolution
     sub-kernels into a bank the array is reading (so conflicts occur).
  3. ReLU, then a pooling step.
  4. Two sub-kernel convolutions interleaved by strided stores.
  5. A deeper layer with K = 300, which runs as two chunks.
  6. Store the results to DRAM.
* **Non-key-frame program:**
  1. SAD block matching of 4 blocks against 24 candidates.
  2. Arg-min.
  3. Matrix Update on a 3 × 2 frame, with displacements that leave the frame.
  4. Compute Flow.
  5. Propagation.

The testbench counts each mechanism and fails if any of them never occurs:

* key frame and non-key frame;
* MAC and SAD;
* strided gather;
* a K split into chunks;
* each scalar operation;
* a boundary-check hit;
* a bank conflict;
* an issue stall.

Simulation takes under a second.

`tb_asv_deep_layer` runs one full-size tile of a deep convolution layer, also
at the default size. The tile is 24 output pixels × 24 filters of a 3 × 3
kernel over 512 channels, so K = 4608. That is the depth of the deeper layers
of DispNet-class stereo networks.

* The DMA loads 221,184 operand words into eight banks.
* The array job runs as 18 chunks.
* All 576 results are compared with exact 32-bit sums.

It takes about 1.4 million cycles. DMA transfers of one word at a time take
most of them.

Unit testbenches use smaller arrays (for example 5 × 4 or 6 × 5 PEs) and check
cycle counts as well as values:

* the array result is ready after exactly K + R + C − 2 enabled cycles, and
  not one cycle earlier;
* the stream length of an array job;
* 1, 2 and 51 lane steps per operation;
* the parallel speed-up of the 8 lanes;
* the key-frame pattern under PW-4 and PW-2.

## What follows the source design and what is this design's own

**Taken from the design as published:**

* 24 × 24 PEs, each with two 16-bit operand registers, a 16-bit fixed-point
  multiplier and a 32-bit accumulator.
* The added |a − b| accumulation for block matching.
* A scalar unit of 8 lanes at a quarter of the array clock (250 MHz against
  1 GHz). It performs ReLU, pooling, Matrix Update and Compute Flow.
* Small extra logic that compares SAD costs and checks flow boundaries.
* A 1.5 MB global buffer in 128 KB banks.
* A DMA engine to off-chip memory.
* A micro-sequencer that also chooses key frames with a fixed window (PW-4,
  with PW-2 as the alternative).
* Deconvolution handled purely by an offline sub-kernel transformation.

**Chosen here (the published description does not give them):**

* The output-stationary dataflow and the drain path.
* All job, instruction and port formats, and the priority arbitration.
* Q8.8 in the lanes.
* The Farneback formulas, taken from the common reference implementation but
  without its border weighting.
* The determinant regularisation (2^-10).
* The disparity-propagation lane operation.
* The operand-store depth KMAX = 256.
* Single-word DMA transfers.
* Asynchronous active-low reset.

## Limits

* **Operand reloads.** Dot products longer than 256 terms are reloaded chunk
  by chunk from the buffer. The array does not overlap loading its next chunk
  or tile with computing the current one. The only overlap is between the DMA
  and the compute units.
* **No external control interface.** There is no host interface beyond the
  instruction-memory write port and a few configuration inputs.
* **Simulation only.** The SRAM banks are plain arrays, not memory macros.
  The DRAM side is a simple word-wide request port, not an LPDDR3 controller.
* **Unchecked sizes.** The sensitivity configurations (for example 8 × 8 PEs
  with a 0.5 MB buffer) can be set through `ROWS`, `COLS` and `BANKS`, but only
  the default size is tested end to end.
* **Small frames in simulation.** No whole frame is simulated. The non-key
  tests use a 3 × 2-pixel flow frame and 4 block-matching pixels. The key
  tests use single layer tiles, the deepest with K = 4608.
* **Offline software not included.** The software that produces programs
  (layer mapping, tiling, sub-kernel transformation) is not part of this
  release. The test programs in `tb/tb_asv_top.sv` were written by hand.

### Remaining lint warnings

* Verilator reports width truncation where 8-bit job counters index the
  24-column result vector, and where lane counters (sized to hold the value 8)
  index 8-entry arrays. The opening comments of `asv_array_engine` and
  `asv_scalar_unit` explain why these indices stay in range.
* Verilator reports `rst_n` as used both asynchronously (flip-flop reset)
  and synchronously: the synchronous use is the `disable iff` of the
  handshake assertions, which is not hardware.
* Unused-signal reports: the arg-min cost output (the scalar unit stores only
  the winning index), the array sequencer's stall counter in `asv_top` (the
  array has the highest buffer priority, so it never waits), job fields a
  unit does not use, and the package's FRAC constant in modules that import
  the package without using it.
* Verilator reports the upper bits of the 64-bit determinant in the
  Compute Flow datapath as unused; only the low 34 bits reach the divider.
