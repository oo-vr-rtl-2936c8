# OO-VR hardware layer: object-level distribution and distributed composition for a four-GPM VR renderer

A multi-chip GPU built from several GPU modules (GPMs) has non-uniform memory access (NUMA).
Each GPM renders fastest from its own DRAM, and the links between GPMs are much slower than
local memory. Stereo VR rendering makes the problem harder. If the frame is split by screen
region, both eyes and all GPMs touch the same textures, so much of that traffic crosses the
links. Object-oriented VR (OO-VR) splits the work by object instead. Each batch of objects is
rendered for both eyes on one GPM. The batch's textures are copied into that GPM's DRAM before
it starts. The finished colour outputs are then sent to whichever GPM owns that part of the
frame buffer.

This RTL holds the hardware part of that scheme for a four-GPM system:

* **Runtime batch distribution engine.** It learns how fast the GPMs render and predicts which
  GPM will be free first. It sends each batch there and has that GPM's pre-allocation (PA) unit
  copy the batch's data ahead of rendering.
* **Fine-grained mapper.** At the end of a frame, it spreads the leftover work of one
  straggling GPM over the GPMs that are already idle.
* **Distributed hardware composition (DHC).** One unit per GPM. The frame buffer is cut into
  four vertical strips, one per GPM. Each DHC sends every colour output to the ROPs of the GPM
  that owns the pixel.
* **Single-pass stereo (SMP) engine.** One per GPM. It turns each triangle into a left-eye
  and a right-eye copy.

The GPMs, ROPs, DRAM and links are not part of this design. The top module, `oovr_top`, brings
their connections out as ports. The software half of OO-VR is also outside this design: the
programming interface and the driver middleware that group objects into batches. Its output,
a stream of batch descriptors, is the top module's input.

```
 batches ──► batch_queue ──► dispatch ──► pa_unit[0..3] ──► launch / copy ports ──► GPM 0..3
                 │        (round-robin,            ▲                                 │
                 │         then earliest)          │ runtime info (tv, pixels,       │
                 └── rt_predictor ◄── gpm_counters ◄─ idle, batch done + cycles) ◄───┤
                            earliest_select ◄──────┘                                 │
                 finegrain_mapper (leftover units ──► GPM)                            │
                                                                                     ▼
            GPM g colour outputs ──► dhc_unit[g] ══ all-to-all links ══ dhc_unit[*] ──► ROP g
            GPM g triangles      ──► smp_engine[g] ──► left/right copies ──► GPM g raster
```

## Distribution engine (`dist_engine`)

The engine has three phases per run. Calibration happens once after reset.

**1. Calibration (the first 8 batches).** The first 8 batches go to GPMs 0, 1, 2, 3, 0, 1, 2, 3
in turn. They carry `prealloc = 0`, so no data is copied and the GPM fetches data on first use.
Each GPM reports `gpm_done_valid` with the cycles the batch took. The predictor adds these up
as T. It also adds up the triangle count of each batch, and the transformed-vertex and pixel
counts the GPMs reported while rendering (`tv_inc` and `pix_inc`, pulses of up to 255 per
cycle).

**2. Learning stall.** Batch 9 waits at the head of the queue until all eight calibration
batches have reported and the rates are computed. While it waits, the middleware sees the
4-entry batch queue fill and `batch_ready` drop. Three 64-step dividers run in parallel, so the
rates are ready 64 to 70 cycles after the eighth report.

**3. Predictive dispatch.** From then on, each head batch goes to the eligible GPM with the
smallest predicted remaining time. A GPM is eligible when its PA queue has room. Ties go to the
lower index. If every PA queue is full, the head batch waits; this is the PA-full stall. On
each dispatch:

* the GPM's total counter grows by `c0 · ntri`;
* its triangle register grows by `ntri`;
* the batch becomes a PA job with `prealloc = 1`.

Only one batch is dispatched per cycle. Batches are taken in queue order, so each PA queue also
holds its batches in batch-ID order.

**Leftover mode.** Near the end of a frame one large batch can still be running while every
other GPM is idle. Leftover mode starts when all of these hold:

* `frame_end` has been seen;
* the batch queue is empty and nothing is being offered;
* the rates are known;
* every PA queue of an idle GPM is empty;
* at least one GPM is busy and at least one is idle.

The straggler is the busy GPM with the most predicted time left. The engine pushes one
duplicate job per idle GPM, once per straggler batch. A duplicate job copies the straggler's
current batch data into the idle GPM's DRAM and launches nothing. The engine also raises
`fg_active`. It drives `fg_owner` with the straggler's index and the taking-part mask with the
idle GPMs plus the straggler. While `fg_active` is high, the GPMs can feed the IDs of the
remaining triangles or fragments into `fg_unit_*`. `finegrain_mapper` sends unit `id` to the
k-th GPM of the mask, where k = `id` mod (number of GPMs in the mask). The straggler keeps its
share. The mapper does not split the GPM's work itself. It only decides where each unit goes.

`stat_engine` counts each of these events:

| Index | Count |
|---|---|
| 0 | calibration dispatches |
| 1 | predictive dispatches |
| 2 | learning-stall cycles |
| 3 | PA-full stall cycles |
| 4 | duplicate jobs |
| 5 | batch-queue-full cycles |

## Rendering-time arithmetic (`rt_predictor`, `gpm_counters`, `earliest_select`)

The model is linear. The time t of a batch is counted three ways, which should agree:

    t = c0 · #triangles = c1 · #transformed vertices + c2 · #rendered pixels

c0 predicts the whole batch at dispatch, because the triangle count is known from the batch
descriptor. c1 and c2 measure how far the GPM has progressed while it renders.

One measured time cannot fix three rates, so calibration splits it. Let T be the total cycles of
the eight calibration batches. Let NT, NV and NP be their summed triangle, vertex and pixel
counts:

    c0 = T / NT        c1 = T / (2 · NV)        c2 = T / (2 · NP)

So the vertex and pixel work each account for half the time. If NV or NP is zero, the other
count takes all of T. A zero divisor gives a rate of 0. The rates are unsigned fixed point: 32
bits with 16 fraction bits, so `1.0 = 65536`. The counters use the same scale.

Each GPM g has two 64-bit counters:

* **total[g]** is the sum of c0 · ntri over the batches sent to g.
* **elapsed[g]** grows each cycle by `c1·tv_inc[g] + c2·pix_inc[g]`.

`remaining[g] = total[g] − elapsed[g]`, saturating at 0. `earliest_select` takes the minimum
remaining time over the eligible GPMs. It is combinational.

Predictions drift from the truth. When a GPM reports `gpm_idle`, its elapsed counter is set
equal to its total, so no error carries into later choices. To be exact, elapsed takes the
value total had before this cycle. A batch dispatched in the same cycle therefore still counts
as pending.

The three count registers per GPM (triangles, vertices, pixels: 12 × 32 bits in all) clear at
`frame_start`. Together with the eight 64-bit counters and four 16-bit batch IDs, the state
comes to 8·64 + 12·32 + 4·16 = 960 bits. The engine also remembers each GPM's last batch
descriptor.

## Pre-allocation units (`pa_unit`)

Each GPM has one PA unit, which is a small job FIFO (depth 4) in front of a sequencer. For a job
whose `prealloc` or `dup` flag is set, the sequencer issues one copy request per texture line:
addresses `tex_addr … tex_addr + tex_lines − 1`, at most one per cycle, with valid/ready on
`copy_*`. It then offers the batch on `launch_*`, except for duplicate jobs. With `copy_ready`
high, a job of n lines launches n + 2 cycles after it reaches the head:

* one cycle to take the job;
* n copy cycles;
* the launch beat.

The memory system that carries out the copies is outside the design. `copy_gpm` names the
destination GPM.

## Composition across GPMs (`dhc_unit`)

The stereo frame is 2560 × 1024 pixels: the left and right 1280 × 1024 views side by side. It is
cut into four strips of 640 columns. Strip g, columns 640g to 640g + 639, lives in GPM g's DRAM.

Each DHC finds the owner of every colour output of its GPM by comparing x with the strip
boundaries.

* **Own pixel.** The pixel goes straight to the local ROP arbiter.
* **Other GPM's pixel.** The pixel goes onto the link to the owner's DHC.

Every ordered pair of GPMs has its own link. Each receiving DHC buffers a link in a 2-entry
FIFO. The ROP port takes one pixel per cycle. It chooses round-robin among the local stream and
the three link FIFOs, and writes to the address inside the strip:

    rop_addr = y · 640 + (x − 640 · GPM_ID)

The address is 20 bits, and the strip holds 655 360 pixels.

A local pixel is accepted in the same cycle it reaches the ROP or a link. A remote pixel
reaches the owner's ROP port one cycle after it was sent, at the earliest. `rop_src` says which
input a ROP beat came from. `stat_dhc_local`, `stat_dhc_remote` and `stat_dhc_in` count pixels
kept, pixels sent away and pixels received.

The link outputs share one data bus: every link carries the current pixel, and only its
`valid` is steered. That is why synthesis sees those outputs as wires from the input.

## Stereo projection (`smp_engine`)

The engine duplicates each triangle from the geometry stage into a left copy and a right copy.
The display's x range is −W … +W with W = 1280:

* The left copy is shifted by −W/2 and belongs to [−W, 0].
* The right copy is shifted by +W/2 and belongs to [0, W].

With `user_vp` set, the shifts are the signed 16-bit offsets `vp_off_l` and `vp_off_r`, which
carry per-eye viewports given by the application.

Clipping keeps each eye's copy on its own half, so no triangle spills into the other eye. A copy
with no vertex inside its half is marked dropped (`keep_l` / `keep_r` = 0). Otherwise each
vertex x is clamped to the half. There is one register stage with valid/ready, so a triangle
accepted in cycle n is offered in cycle n + 1.

## Departures from the paper and limits

* **Rate split.** The calibration rule that turns one measured time into three rates is this
  design's own. So is the fixed-point format.
* **Ending a mis-prediction.** Resetting elapsed to total on idle is this design's own. So are
  the saturation of the remaining time and the exclusion of GPMs with full PA queues.
* **Batch descriptor.** The descriptor is `id`, `ntri`, `tex_addr`, `tex_lines`. Only the 16-bit
  batch ID has a width from the paper. The copy-request format, the 4-deep PA queue and the
  one-line-per-cycle rate are choices.
* **Leftover mapping.** The trigger condition, the once-per-batch duplication and the
  ID-modulo mapping rule are choices. The paper says only that leftover units are spread
  "fairly by ID" and that their data is duplicated.
* **Composition.** The DHC handles one pixel per beat. The real ROP width (8 ROPs of 4 pixels
  per GPM) is not modelled, and neither is blending or reading back from the frame buffer.
* **Clipping.** SMP clipping is a drop-or-clamp approximation. It does not cut triangles at
  the boundary into new vertices.
* **Calibration scope.** Calibration happens once after reset. The rates are kept for later
  frames.
* **Frame size is fixed per build.** A 1280 × 1024 view per eye is the default. The other
  resolutions the evaluation uses need different parameters:

  | Per-eye resolution | FRAME_W | FRAME_H | SMP_W | Strip size | Fits the 20-bit address |
  |---|---|---|---|---|---|
  | 1600 × 1200 | 3200 | 1200 | 1600 | 800 × 1200 = 960 000 pixels | yes |
  | 640 × 480 | 1280 | 480 | 640 | 320 × 480 | yes |

  At the default parameters, a 640 × 480 frame would land on strips 0 and 1 only, and a
  1600 × 1200 frame would not fit.

## Interfaces and timing of the top (`oovr_top`)

Parameters and their defaults:

| Parameter | Default |
|---|---|
| `NGPM` | 4 |
| `QDEPTH` | 4 |
| `PADEPTH` | 4 |
| `CAL_BATCHES` | 8 |
| `FRAME_W` | 2560 |
| `FRAME_H` | 1024 |
| `SMP_W` | 1280 |

There is one clock, `clk`. Reset `rst_n` is asynchronous and active low. Every stream uses
valid/ready: data moves in a cycle where both are high, and a source holds valid and data
stable until it is taken. Assertions in the RTL check this on the PA and DHC outputs.

The port groups:

* **Middleware side**
  * `frame_start`, `frame_end` (one-cycle pulses).
  * `batch_valid/ready/desc`.
* **GPM side, per GPM**
  * Runtime inputs: `gpm_done_valid` + `gpm_done_cycles`, `gpm_tv_inc`, `gpm_pix_inc`,
    `gpm_idle`.
  * Dispatch outputs: `launch_*` and `copy_*`.
  * Stereo stream: triangles in on `geo_*`, left/right copies out on `smp_*`.
  * Colour outputs in on `pix_*`; frame-buffer writes out on `rop_*`.
* **Leftover**
  * `fg_active`, `fg_owner`.
  * Units in on `fg_unit_*`; mapped units out on `fg_tgt_*`.
* **Status**
  * `cal_done`, `stat_engine[6]`, `stat_dhc_*[4]`.

## Simulating

All files are plain SystemVerilog-2017. `rtl/oovr_pkg.sv` holds the shared types and widths and
must be read first. Any testbench builds with Verilator 5, for example:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
              rtl/oovr_pkg.sv tb/tb_oovr_top.sv --top-module tb_oovr_top
    ./obj_dir/Vtb_oovr_top

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops. A watchdog ends a hung
run with a failure. Stimulus uses `$urandom`, so `+verilator+seed+<n>` gives a different run.

| Testbench | What it checks |
|---|---|
| `tb_batch_queue` | Order, full/empty/count and back-pressure against a queue model. |
| `tb_rt_predictor` | The three rates and predictions against integer arithmetic. The calibration latency (64–70 cycles). |
| `tb_gpm_counters` | Total, elapsed and remaining counters, idle resync and frame clear, against a model. |
| `tb_earliest_select` | Minimum, eligibility and tie-break. |
| `tb_pa_unit` | Copy addresses, ID order, dup jobs, and the n + 2 launch latency. |
| `tb_finegrain_mapper` | The target rule and back-pressure. |
| `tb_dhc_unit` | Owner, address and colour of every pixel. No loss or duplication under random stalls on all links. |
| `tb_smp_engine` | Both eyes, drop flags, clamping and user viewports. |
| `tb_dist_engine` | Calibration round-robin, the exact predicted choice, the PA-full stall and leftover duplication. Uses behavioural GPMs (`tb/gpm_model.sv`). |
| `tb_oovr_top` | The whole design at its default parameters (below). |
| `tb_oovr_workloads` | One frame of each benchmark workload, built for its resolution (below). Uses `tb/oovr_workload_run.sv`. |

`tb_oovr_top` runs for about 19 000 cycles. It drives two frames of 40 batches, with a
4000-triangle batch last in frame 2, through four behavioural GPMs. The GPMs emit colour outputs
at random screen positions, and the ROPs stall at random. The test checks that:

* every batch launches exactly once;
* calibration goes round-robin;
* every pixel reaches the right ROP with the right address and colour;
* every leftover unit reaches the GPM the mapping rule names;
* every SMP output matches a reference model.

It also requires each mechanism to occur at least once:

* calibration;
* the learning stall;
* predictive dispatch;
* pre-allocation copies;
* queue back-pressure;
* the PA-full stall;
* duplication;
* fine-grained mapping;
* local and remote composition;
* SMP drops;
* user viewports.

### Benchmark frames

`tb_oovr_workloads` runs nine frames side by side. They follow the evaluation's benchmark
table. Each run is built for its own resolution, so the 1600 × 1200 and 640 × 480 runs override
`FRAME_W`, `FRAME_H` and `SMP_W`. Each run issues one batch per draw call, with 16–512
triangles at random and a 2000-triangle batch at the end. The games' real geometry is not
available, so the batch sizes stand in for it. Each run checks delivery and ownership of every
colour output. It also checks load balance: from the end of calibration to the last batch,
the frame may take no more than work/4 plus the longest batch plus 2% and 200 cycles.

| Workload | Draws | Cycles after calibration | Ideal (work / 4) |
|---|---|---|---|
| DM3 1600 × 1200 | 191 | 28 677 | 25 888 |
| DM3 1280 × 1024 | 191 | 28 481 | 25 536 |
| DM3 640 × 480 | 191 | 27 288 | 24 353 |
| HL2 1600 × 1200 | 328 | 44 860 | 42 034 |
| HL2 1280 × 1024 | 328 | 46 724 | 43 950 |
| HL2 640 × 480 | 328 | 47 698 | 45 162 |
| NFS 1280 × 1024 | 1267 | 164 311 | 161 210 |
| UT3 1280 × 1024 | 876 | 119 323 | 116 321 |
| WE 640 × 480 | 1697 | 233 804 | 230 757 |

Most of the gap is the final large batch. Leftover mode then duplicates its data to the three
idle GPMs. The behavioural GPMs do not take on mapped units, so that batch still finishes
alone.

## Files

| File | Contents |
|---|---|
| `rtl/oovr_pkg.sv` | Widths and the batch, job, pixel, vertex and triangle types. |
| `rtl/stream_fifo.sv` | Typed valid/ready FIFO (used by the queue and the PA units). |
| `rtl/seq_divider.sv` | 64-bit restoring divider, one bit per cycle. |
| `rtl/batch_queue.sv` | 4-entry batch queue. |
| `rtl/rt_predictor.sv` | Calibration and c0 · ntri. |
| `rtl/gpm_counters.sv` | Total, elapsed and count registers. |
| `rtl/earliest_select.sv` | The earliest-free selector. |
| `rtl/pa_unit.sv` | Pre-allocation unit. |
| `rtl/dist_engine.sv` | The engine that ties these together. |
| `rtl/finegrain_mapper.sv` | Leftover unit mapping. |
| `rtl/dhc_unit.sv` | Composition unit. |
| `rtl/smp_engine.sv` | Stereo projection. |
| `rtl/oovr_top.sv` | Top module. |
| `tb/*.sv` | Testbenches, the behavioural GPM model (`gpm_model.sv`) and the workload harness (`oovr_workload_run.sv`). |
