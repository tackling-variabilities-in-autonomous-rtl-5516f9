# HMAI: a heterogeneous multicore CNN accelerator for vehicle cameras

A car with thirty cameras does not give its perception hardware a steady
load. How many frames arrive per second changes with the road and the
manoeuvre. Each frame can go to a different network: YOLO or SSD for
detection, GOTURN for tracking. The three accelerator styles below each suit
some of these layers better than the others.

HMAI puts several accelerators of different styles on one chip and lets a
scheduler on a control CPU choose a core for each frame. The cores share the
camera data through an interconnect.

This RTL builds that chip in its main configuration:

* 30 cameras, each with its own DMA engine and its own frame SRAM (640 x 480
  pixels, three colour planes);
* a sensor controller that starts the DMAs and reports, to the CPU, which
  camera has a finished frame;
* an interconnect that connects every core to every camera SRAM and carries
  the CPU's tasks to the cores;
* 11 cores with a task queue (the "instruction SRAM") each:
  * 4 × SconvOD
  * 4 × SconvIC
  * 3 × MconvMC

The CPU and its reinforcement-learning scheduler, the cameras, and the
external memory that supplies weights and takes results are not part of the
RTL. Their signals are ports of `hmai_top`.

## What a task is

A *task* is a descriptor `{tag, model, camera}` (`hmai_pkg::task_desc_t`). It
asks a core for one convolution layer over the frame held in that camera's
SRAM. The layer has a fixed shape:

* C = 3 input channels (the colour planes)
* M = 4 filters of F × F = 3 × 3
* stride 1, no padding
* output of (W−F+1) × (H−F+1) neurons per filter

Every core computes exactly the same numbers for the same task:

    out[m][y][x] = Σ_c Σ_ky Σ_kx  w[m][c][ky][kx] · frame[c][y+ky][x+kx]

Arithmetic:

* pixels are 8-bit unsigned, weights 16-bit signed, sums 32-bit;
* frames are stored plane by plane: address `c·H·W + y·W + x`;
* weights are written into a core beforehand (`wt_core`, `wt_wr`), at address
  `((m·C + c)·F + ky)·F + kx`.

The `model` field does not change the computation. It travels with the task
for the scheduler's bookkeeping. The `tag` comes back on `core_done_tag` when
the task finishes.

Results leave each core as a stream of `ofmap_t` records: `{m, ch, y, x,
data}` plus a `partial` flag. SconvOD has no buffer for partial sums (see
below), so it sends one partial sum per input channel (`partial = 1`,
`ch = c`), and the receiver adds the C of them. The other two cores send
finished neurons.

One layer per task is the main simplification of this design. The
accelerator styles, the data movement and the sharing of frames are built
in full. A whole detection network (its layer list, its weights of megabytes,
its intermediate feature maps) is not.

## Life of a frame

1. **Camera → sensor controller.** A camera raises `cam_frame_req`. If that
   camera's DMA is idle, the controller starts it one cycle later. If the DMA
   is still busy, the request is refused and `cam_drop` pulses for that
   camera.
2. **DMA → data SRAM.** The DMA writes one pixel per cycle in which the
   camera drives `cam_pix_valid`. Addresses are consecutive, so the whole
   frame lands in that camera's own SRAM. All 30 DMAs can run at the same
   time, because each has its own SRAM.
3. **Sensor controller → CPU.** When a DMA finishes, its camera is marked
   ready. A round-robin picks one ready camera per cycle into a 32-entry ID
   queue. The CPU reads IDs with `cid_valid` / `cid` / `cid_ready`.
4. **CPU → core.** The CPU chooses a core and offers the task
   (`task_valid`, `task_core`, `task_in`). The interconnect steers it into
   that core's task queue. `task_ready` drops while that queue is full.
   `core_qlevel`, `core_busy` and `core_done` give the scheduler what it
   needs to decide.
5. **Core ← data SRAM.** The core pops its next task and reads the frame
   through the interconnect, one pixel per request.

## The interconnect

Every data SRAM has one read port. Its arbiter looks at the requests of all
11 cores and grants one per cycle, round-robin: the pointer moves to the core
after the one last granted.

A read has this timing:

* the grant (`rd_rsp.gnt`) comes in the same cycle as the request;
* the pixel (`rd_rsp.rvalid`, `rdata`) comes exactly one cycle later.

An assertion checks that every grant is followed by data.

A core that is not granted keeps its request and tries again next cycle.
Cores that read different cameras never wait for each other. Cores that read
the same camera share that SRAM's one pixel per cycle.

## The three cores

All three cores have the same ports. All three take one task at a time from
their queue and pulse `done` with the task's tag after their last output.

The three cores differ in how much work a PE does at once:

* SconvOD and SconvIC PEs each have one multiplier.
* An MconvMC PE has F·F multipliers and works on a whole window slice per
  cycle.

They also differ in where the registers sit:

* SconvOD keeps its weights in registers inside each PE.
* SconvIC and MconvMC keep their operands in a central register block (the
  ifmap register and the filter register) that feeds the PE array.

### SconvOD: pixel broadcast, weights fixed in the PEs (`sconv_od`)

The grid has F lines of F PEs. Each PE holds one weight in a register.

Every cycle, one pixel of one channel is broadcast to all nine PEs. Each PE
adds *weight × pixel* to the partial sum arriving from its left neighbour and
passes the result on.

The sum leaving line r enters a FIFO of W−F entries. It comes out when the
pixels one image row lower arrive, and line r+1 picks it up there. The sum
leaving the last line is therefore a complete F × F window, one neuron per
pixel. Windows that wrap round a row edge, or start above the image, are
discarded.

Each pixel is read once per pass. A pass covers one (filter, channel) pair.
It costs F·F cycles to copy that kernel into the PE registers, then one cycle
per granted pixel. A task is M·C passes, about M·C·(W·H + F² + 1) cycles:
3.7 M cycles for a 640 × 480 frame.

The per-channel sums leave the core as partial results, because this style
keeps no partial-sum memory on chip.

### SconvIC: weight broadcast, output-stationary PEs (`sconv_ic`)

A PR × PC array (8 × 8 by default) of PEs. Each PE owns one output neuron of
the current tile.

Every cycle, one weight is broadcast to all PEs. Each PE multiplies it with
its own pixel from the ifmap register and accumulates. After C·F·F cycles the
tile's neurons for one filter are finished. They are copied into an output
register and sent out one per cycle, while the array starts the next filter.

The ifmap register holds two banks, each a (PR+F−1) × (PC+F−1) × C window of
the frame. While the array computes from one bank, a loader fills the other
bank with the next tile. The banks swap when both are finished.

Two stall rules keep this safe:

* a filter's last tap waits if the output register has not finished
  draining;
* a tile waits for its load.

Tiles at the right and bottom edges run past the image. The loader clamps
its addresses there, and neurons outside the output are not sent.

At one pixel per cycle from the interconnect, a tile load (300 reads at the
defaults) takes longer than its compute and drain: 4 filters × (27 + 64)
cycles. This core is therefore limited by its loads.

### MconvMC: per-channel PEs and an adder tree (`mconv_mc`)

There is one PE per input channel (Tc = C = 3). Each channel has an F × F
window register.

Each cycle, the filter register sends a different F × F kernel slice to each
PE: slice w[m][c] goes to PE c. The PEs form their dot products in parallel,
and an adder tree sums the three results into one finished neuron. The M
filters are issued on consecutive cycles over the same window.

The window walks down one output column. While the filters are being
issued, a loader fetches the next row of F pixels per channel into a staging
row. Then the window shifts up by one row and takes the staging row in at the
bottom. A new column starts by loading F rows.

Each window costs max(F·C reads, M issues) + 1 cycles: 10 at the defaults.
Results appear two cycles after issue: one cycle for the PE stage and one for
the adder stage.

This core reads its window rows from the camera SRAM through the
interconnect. It does not have a per-channel ifmap SRAM of its own.

## Parameters

Defaults of `hmai_top`:

| Parameter | Default | Meaning |
|---|---|---|
| `NUM_CAM` | 30 | cameras, DMAs and data SRAMs |
| `N_OD`, `N_IC`, `N_MC` | 4, 4, 3 | cores of each kind (numbered 0–3, 4–7, 8–10) |
| `IMG_W`, `IMG_H` | 640, 480 | frame size |
| `NUM_CH`, `NUM_FILT`, `KSIZE` | 3, 4, 3 | layer shape of a task |
| `IC_PR`, `IC_PC` | 8, 8 | SconvIC output tile |
| `ISRAM_DEPTH` | 16 | tasks per core queue |
| `CID_DEPTH` | 32 | camera-ID queue |

Shared widths and types are in `hmai_pkg`. All resets are synchronous and
active low.

## Where this design departs from the published architecture

Sources of the numbers:

* The number of cameras, the core mix and the frame size follow the
  published design.
* The layer shape, the widths, the queue depths, the SconvIC tile size and
  every handshake are this design's own choices.

Departures:

* **One layer per task.** The published chip runs whole networks. Here every
  task is the fixed single layer above, so the published frame rates per
  network cannot be reproduced or checked against this RTL. No clock
  frequency is assumed either.
* **Ifmaps come from the camera SRAMs.** The accelerator drawings show ifmaps
  coming from external memory (SconvOD, SconvIC) or from a per-channel ifmap
  SRAM (MconvMC). The chip-level data flow says each core reads its frame
  from the camera's SRAM. This design follows the chip-level description for
  all three cores.
* **MconvMC issues M = 4 filters over C = 3 channels.** The published
  description sets Tm = Tc.
* **The interconnect is a plain crossbar** with per-SRAM round-robin
  arbitration. The published chip uses a standard on-chip bus. The
  camera-ID path to the CPU is a direct valid/ready port.
* **Refused camera requests.** A camera that requests while its DMA is busy
  is refused (`cam_drop`). The published description does not say what
  happens then.
* **The scheduler is outside.** The reinforcement-learning scheduler, its
  training, the CPU and the external memory have no RTL here.

## Simulating

Every file in `tb/` is a self-checking testbench that ends by printing
`TB_RESULT checks=N failures=M`. Example with plain Verilator:

    verilator --binary --timing --assert -Irtl rtl/hmai_pkg.sv rtl/*.sv \
        tb/tb_hmai_top.sv --top-module tb_hmai_top -Mdir obj -o sim
    obj/sim

Unit testbenches:

* `tb_data_sram`, `tb_camera_dma`, `tb_sensor_controller`, `tb_instr_sram`
  and `tb_soc_interconnect` compare each block with a reference model under
  random traffic.
* `tb_sconv_od`, `tb_sconv_ic` and `tb_mconv_mc` run two tasks on a 13 × 9
  frame:
  * the first with a grant every cycle, where the cycle count is also
    checked against the timing given above;
  * the second with about one grant in four withheld.

  Every output neuron is compared with a convolution computed in the
  testbench.

`tb_hmai_top` runs the whole chip with 6 cameras, 13 × 9 frames and the full
11-core mix:

* every camera sends a frame at once;
* each frame becomes three tasks on cores of the three kinds;
* a burst of tasks then fills one core's queue.

It checks every result. It also counts the events the design is built around
and fails if any never happened:

* refused camera requests;
* read contention at an SRAM;
* queued and blocked tasks;
* a CPU slow to read camera IDs;
* SconvOD partial sums;
* SconvIC loading a tile while computing;
* parallel DMAs.

`tb_hmai_top_full` runs `hmai_top` with every parameter at its default. Camera
7 sends a full 640 × 480 × 3 frame. One SconvOD, one SconvIC and one MconvMC
core then process it at the same time, sharing that camera's SRAM, and all
3.66 million results are checked. It takes about five minutes to compile and
under a minute to run.

A test of realistic throughput (whole networks at the rates a car needs) is
not possible with single-layer tasks. It would also need a clock frequency,
which no source gives.
