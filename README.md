# Anti-UAV tracking and classification chip in SystemVerilog

Small drones are hard to spot. They cover only a few pixels, and they move fast
enough to blur in a normal camera. This design watches the sky with an event camera.
It finds and tracks moving objects using very little logic that is always on. The
costly neural network runs only once per object, to decide whether the object is a
drone. The RTL follows the architecture of the ISSCC-style paper *"A 96pJ/Frame/Pixel
and 61pJ/Event Anti-UAV System with Hybrid Object Tracking Modes"*. The paper
describes the blocks and their main rules but not their internals. Everything that
had to be filled in is marked below as a design choice.

The chip has three processors:

| Part | Role | Always on? |
|---|---|---|
| **ESP**, event signal processor | Turns the event stream into region proposals (RPs: bounding boxes of candidate objects). It tracks them and records the trajectories of fast ones. | yes |
| **ISP**, image signal processor | Cuts a tracked object's patch out of a grayscale frame, denoises it and resizes it. | on demand |
| **NPU**, neural network processing unit | Runs a small program of 64-bit instructions on a 16×16 MAC array to classify the patch or the trajectory. | on demand |

`classify_ctrl` ties them together. It picks each new object once and chooses its
input. Slow objects are classified from a grayscale patch. Fast objects are
classified from their trajectory, because their patch would be blurred.

```
 AER events ─► frame_builder ─► noise_filter ─► rle_encoder ─┐ slices (frame mode)
      │                                                      ▼
      └─────── events (event mode) ─► event_fifo ─────────► rpu (32 × rpu_pe) ◄─TH── fotu (32 × rp_monitor,
                                                             │   RPs, upd              arbiter, 8-bank
 gray pixels ─► isp ◄─ ROI ── classify_ctrl ◄─ RPs/fast ─────┘                         trajectory memory)
                 └─ patch ─►       │  ▲  ◄──────── trajectory points ──────────────────┘
                                   ▼  │ class
                                   npu (instr / weight / feature / output memories, 16×16 PE array)
```

## Hybrid tracking: frame mode and event mode

Frame-based detection is cheap. You build a binary picture of "where something
changed", label connected regions once, and sleep until the next picture. But a fast
object has moved on by the next picture. Per-event tracking follows fast objects
well, but it must wake up for every event. The RPU does both, on the same hardware.

**Frame mode.** The frame builder sets one bit per pixel for every event during
`frame_period` cycles. It then streams the image out one row per cycle and clears
each row as it goes. The noise filter keeps a pixel only if at least one of its 8
neighbours is also set. The run-length encoder turns each row into *slices*
`(row, c1, c2)`, one per run of adjacent set pixels, and finishes the frame with an
end-of-frame token. The RPU labels connected components from these slices.

- A slice that touches an existing RP extends it.
- A slice that touches nothing starts a new RP.
- A slice that touches several RPs merges them.

At the end of the frame, every RP of at most `valid_size` pixels (default 9) is
discarded. If at least one object is left, the RPU switches to event mode.
Otherwise it stays in frame mode.

**Event mode.** The frame builder stops. Every event goes to the RPU through a short
queue, and the RPU tests it against every RP. An event "hits" an RP if it lies within `ev_nbr` pixels of
it. On a hit, the PE counts the event and records the bounding box of the hits since
its last update. When the count exceeds the PE's threshold TH, the RP is replaced by
that box (RP*) and the PE pulses `upd`. After `refresh_period` cycles the RPU drops
all RPs and returns to frame mode to look for new objects. The exception is while
the FOTU is recording a fast object: its `hold` output keeps the RPU in event mode.

### The RPU protocol (two cycles per input)

The 32 PEs share one broadcast bus. The PE controller treats every slice or event
the same way:

1. **Broadcast.** The data scheduler takes one input (a slice in frame mode, an event
   in event mode) and puts it on the bus. Each PE's location comparator tests it
   against the PE's RP. In frame mode, the RP is grown by `nbr_dx`/`nbr_dy`, default
   1, which makes the test 8-connected. In event mode, the RP is grown by `ev_nbr`.
   The result goes into the PE's status bit.
2. **Decide.** The controller reads the 32 status bits.
   - **No match, frame mode:** the slice is loaded into the lowest free PE. If every
     PE is busy, the slice is dropped and counted (`n_drop`).
   - **No match, event mode:** the event is ignored.
   - **One match, frame mode:** the RP takes the union with the slice, and the
     slice's pixels are added to its size.
   - **One match, event mode:** the PE gets a HIT command (count and record).
   - **Several matches:** the lowest-index match receives the union of all matched
     RPs (plus the slice) and the sum of their sizes. The other matched PEs are
     freed (`n_merge`).

`s_ready`/`e_ready` are low during the decide cycle, so the RPU accepts at most one
input every two cycles. The run-length encoder simply waits. Events, however, can
arrive every cycle, so the ESP puts a 4-entry event queue (`event_fifo`) in front of
the RPU. An event that finds the queue full is dropped and counted (`n_ev_lost`).
The queue is emptied in frame mode, so old events never reach the next tracking
period.
Mode switches happen in the cycle after the end-of-frame token, or when the refresh
timer expires. Each PE's RP is 48 bits: a 5-bit id, four 9-bit coordinates and a
7-bit saturating size.

## Fast objects: adaptive threshold and trajectories (FOTU)

With a fixed TH, a large or fast object's RP trails behind the object. The FOTU has
one `rp_monitor` per PE. On every event-mode update, the monitor measures:

- `area = (xmax-xmin+1)·(ymax-ymin+1)`;
- `speed`, the Manhattan distance the RP centre moved since the last update;
- `dArea`, the change in area.

If the size or position changed, TH is recalibrated:

```
TH = bias + (wa · area) / 16 + (ws · speed) / 16        clamped to 1 … 255
```

`wa` and `ws` are unsigned with four fraction bits. Before an object's first update,
TH equals `bias`. An object becomes **fast** when `dArea > th_a` or `speed > th_s`.
Speed is measured in pixels per update rather than pixels per second, because the
chip has no time base for it. The fast flag stays set until the PE is freed.

For a fast object, the monitor offers a trajectory point (centre x, y, and a 14-bit
time stamp) whenever the centre has moved more than `step` pixels (default 4) in x or
in y since the last stored point. A round-robin arbiter writes one point per cycle
into the trajectory memory. That memory is 2 KB: 8 banks of 64 32-bit words, one
bank per fast object. A bank is claimed at an object's first point. Points are
dropped and counted (`n_lost`) when no bank is free or the bank is full. Any fast
object sets `hold`. `traj_clear` releases all banks.

## Classification once per object

`classify_ctrl` runs only in event mode. It picks the lowest occupied PE that is not
yet classified and has had at least `min_upd` updates, so that its speed is known.

- **Slow object:** the ISP is started with the RP as its region of interest. The
  ISP waits for the next grayscale frame (pixel (0,0)) and then does three things:
  - crops the ROI;
  - runs a 3-tap horizontal median filter;
  - resizes the ROI to 32×32 by nearest neighbour, through a one-line buffer.
    The pixel input is stalled while a line is written out or while one source
    pixel fills several output pixels.

  The controller packs the 1024 patch bytes 16 per 128-bit word into the NPU feature
  memory at `patch_base`. It then starts the NPU program at `pc_patch`.
- **Fast object:** when the object's trajectory bank holds at least `traj_min`
  points, the points are copied one per word to `traj_base`. The NPU then runs from
  `pc_traj`.

The class returned by the NPU's WTA instruction is stored in `obj_class[pe]`, and the
PE is marked classified. The mark is cleared when the PE is freed, so a lost object
that is found again is classified again. While the controller or the NPU is busy,
the external NPU memory port is disabled (`host_ok` low).

## NPU

Memories, all simple dual-port with registered reads:

| Memory | Size | Organisation |
|---|---|---|
| weight | 8 KB | 512 × 128 bit |
| feature | 8 KB | 512 × 128 bit |
| output | 2 KB | 128 × 128 bit |
| instruction | 0.5 KB | 64 × 64 bit |

The PE array is 16×16 and output-stationary. Row r receives one int8 feature and
column c one int8 weight, and PE(r,c) accumulates their product into a 32-bit
partial sum. A PE skips the multiply, and keeps its sum, when either operand is
zero (`n_skip` counts these). A program runs from `start_pc` and continues until an
instruction with bit 63 set has finished.

Instruction format: the operation is in bits [2:0]. The other fields were chosen
for this design:

| op [2:0] | fields |
|---|---|
| 1 FC, 2 MATMUL | [11:3] feature address, [20:12] weight address, [30:21] K, [37:31] output row, [42:38] right shift, [43] ReLU, [44] 2×2 max-pool, [45] chain |
| 3 DATA MOV | [4:3] source memory, [6:5] destination memory (0 feature, 1 weight, 2 output), [15:7] source address, [24:16] destination address, [33:25] word count |
| 4 WTA | [9:3] output row, [14:10] number of classes: the index of the largest int8 value becomes `wta_class` |
| 0 CONV | as MatMul, with the kernel size KS in [24:21] (low bits of K) |
| 5–7 | not executed: sets `err` and skips |

**MATMUL/FC.** The instruction reads K word pairs, one per cycle, and feeds them
into the array. Feature word k holds the 16 row operands of step k, and weight word
k holds the 16 column operands.

**CONV.** One instruction convolves a one-channel image strip with 16 kernels of
KS×KS taps and produces 16 neighbouring output pixels of one output row.

- **Image.** Row y of the strip occupies two feature words: `faddr + 2y` holds pixels
  0–15 and `faddr + 2y + 1` holds pixels 16–31.
- **Kernels.** Tap (ky, kx) of the 16 kernels is weight word `waddr + ky·KS + kx`.
- **Sequence.** For each kernel row, the two image words are loaded into a 32-pixel
  window. The taps then follow, one per cycle: array row r (output pixel r) takes
  window pixel r + kx, and column c (kernel c) takes the tap's weight.
- **Result.** Output word `oaddr + r` holds the 16 kernel results of pixel r.
- **Cost.** KS·(KS+2) + 1 cycles.

A program walks over output rows by stepping `faddr` by 2.

**Chaining through the accumulator.** A MAC instruction (FC, MATMUL or CONV) with
the chain bit set leaves its sums in the array. It writes nothing back, and the
next MAC instruction does not clear the sums before adding to them. A
multi-channel convolution is therefore one CONV per input channel, with every
CONV but the last chained. The same mechanism lets a MatMul run longer than K =
1023.

**Write-back through the output FIFO.** When the MACs are done, all 16 accumulator
rows pass 16 non-linear units (shift, optional ReLU, saturate to int8) and enter a
16-row output FIFO in a single cycle. The FIFO then drains one row per cycle into
the output memory, through the 2×2 max-pool unit if pooling is on. Meanwhile the
controller is already fetching and running the next instruction. A MatMul therefore
costs K + 5 cycles (fetch, decode, K reads, drain, capture, next) rather than K + 20.

Three things wait for the FIFO to empty:

- a WTA;
- a DATA MOV to or from the output memory;
- the end of the program (`done`).

Another MAC instruction also waits if it finishes its MACs before the previous
drain has ended. The next instruction's memory reads thus overlap the current
instruction's pooling and write-back. They do not overlap its MACs.

## Configuration registers (AXI4-Lite, ESP)

| Address | Register | Reset | Meaning |
|---|---|---|---|
| 0x00 | frame_period | 2,550,000 | frame length in cycles (16.7 ms, i.e. 60 frames/s at 153 MHz) |
| 0x04 | refresh_period | 1,530,000,000 | event-mode time before re-detection (10 s at 153 MHz) |
| 0x08 | nbr_dx | 1 | frame-mode neighbourhood, x |
| 0x0C | nbr_dy | 1 | frame-mode neighbourhood, y |
| 0x10 | ev_nbr | 8 | event-mode neighbourhood |
| 0x14 | valid_size | 9 | an RP is an object if its size exceeds this |
| 0x18 | bias | 4 | TH bias |
| 0x1C | wa | 4 | TH area weight, /16 |
| 0x20 | ws | 16 | TH speed weight, /16 |
| 0x24 | th_a | 64 | dArea limit for "fast" |
| 0x28 | th_s | 2 | speed limit for "fast" |
| 0x2C | step | 4 | trajectory step |
| 0x30 | status (read only) | – | [0] RPU mode, [23:16] dropped slices, [31:24] switches to event mode (low 8 bits of the counters) |

## Where this RTL departs from the paper

- **Frame memory.** The block diagram prints 20 Kb, but a binary image of the
  346×260 sensor needs 89,960 bits. The RTL stores one bit per pixel and does not
  guess at a compressed store. As a result the design holds about 42 KB of memory,
  where the chip is quoted at 22.4 KB.
- **Refresh period.** The text says 5 to 30 s, and the flow chart says 10 to 30 s.
  The register's default, 10 s, satisfies both.
- **Neighbourhood sizes, noise-filter rule and TH weight format.** These are not
  given in the paper and are chosen here.
- **Speed units.** Speed is measured per RP update, not in pixels per second. The
  paper's 20 px/s split between the two classification paths therefore becomes the
  `th_s`/`th_a` registers.
- **Bus, DMA and DDR.** The block diagram connects the blocks over an AXI bus, with a
  DMA to off-chip DDR. Here the blocks are wired point to point. The NPU memory
  port (`h_*`) stands in for the DMA.
- **Power domains.** The always-on domain and NPU power gating are not modelled.
- **NPU.** Several parts are missing or simplified:
  - CONV reads one input channel per instruction. Channels are summed by chaining.
  - Operand preloading is limited: the next instruction's reads overlap only the
    write-back, not the MACs.
  - The weight and feature buffers are replaced by direct reads from the memories.
  - DATA MOV copies whole words. It has none of the data-shuffle options the
    instruction table hints at.
- **RP buffer.** The PE diagram shows the RP buffer as "48 bit × 8". Each PE here
  holds one 48-bit RP. The input queue drawn in front of the PE is built once, as
  the event queue in front of the RPU.

## Throughput and latency at the default size

`tb_esp_rates` measures the ESP at 346×260 with 32 PEs. Clock rates are at 153 MHz.

| Mode | Measured | At 153 MHz | Published for the chip |
|---|---|---|---|
| Frame, scan start to RPU decision | 90,224 cycles | about 1,700 frames/s | latency W×(H+5) = 91,690 cycles; 473.5 fps |
| Event, event to RP update | 3 cycles | – | 2–10 cycles |
| Event, sustained | one event every 2 cycles, no loss | 76.5 M events/s | 10.25 M events/s |

The frame figure is set by the run-length encoder, which scans one column per
cycle. A burst at one event per cycle fills the event queue within a few cycles.

## Files

`rtl/anti_uav_pkg.sv` holds the shared types: `box_t`, `rp_t`, `slice_t`,
`aer_event_t`, `esp_cfg_t`, `npu_dec_t`, and the sizes. There is one module per
file:

| Group | Modules |
|---|---|
| ESP | `frame_builder`, `noise_filter`, `rle_encoder`, `event_fifo`, `rpu_pe`, `rpu`, `rp_monitor`, `fotu`, `esp_config_regs`, `esp` |
| ISP | `isp` |
| NPU | `npu_pe`, `npu_pe_array`, `npu_sram`, `npu_nonlinear`, `npu_pool`, `npu_decoder`, `npu` |
| System | `classify_ctrl`, `anti_uav_top` |

Each file opens with a description of its interface and timing.

The default parameters are the chip's sizes:

| Parameter | Default |
|---|---|
| W×H | 346×260 |
| N (PEs) | 32 |
| NB (trajectory banks) | 8 |
| DEPTH (points per bank) | 64 |
| PW×PH (patch) | 32×32 |

## Simulation

Every testbench in `tb/` checks itself and ends with a line
`TB_RESULT checks=N failures=M`. Each has a watchdog. There is one testbench per
module (`tb_<module>`), plus:

- `tb_anti_uav_top`, the end-to-end test at a reduced size (32×16 sensor, 8 PEs,
  2 banks, 8×8 patch). It goes through:
  - a frame with a U-shaped object (whose two arms must be merged), a square
    object, and sixteen small blobs that outnumber the free PEs (drops) and are
    then discarded by the nine-pixel rule;
  - the switch to event mode;
  - event tracking with RP updates;
  - a fast object with trajectory points and `hold`;
  - a burst of back-to-back events that overruns the event queue (lost events);
  - classification of one patch and one trajectory by a real NPU program;
  - the refresh back to frame mode.

  It counts each of these and fails if one never happened.
- `tb_esp_rates`, the ESP at full size: the latency and rate measurements above.
- `tb_anti_uav_full`, the same scenario on the top at its default parameters. The
  frame and refresh periods are shortened through the AXI registers. It runs about
  700k cycles.

With plain Verilator 5, for example:

```
verilator --binary --timing -Wno-fatal --top-module tb_rpu \
    rtl/anti_uav_pkg.sv rtl/rpu_pe.sv rtl/rpu.sv tb/tb_rpu.sv
./obj_dir/Vtb_rpu
```

For the whole system, pass the package first, then all of `rtl/*.sv`, then
`tb/tb_anti_uav_top.sv` (or `tb/tb_anti_uav_full.sv`) with the matching
`--top-module`. The simulator is two-state, so every register that is read has a
reset.
