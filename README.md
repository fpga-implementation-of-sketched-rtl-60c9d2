# On-line spline sketches for a 192 × 128 SPAD LiDAR camera

A time-resolved SPAD camera reports, for every pixel and every frame, the
arrival time of at most one photon: a 12-bit time stamp (40 ps bins, 0 = no
photon). A 192 × 128 array at about 6,500 frames/s produces some 160 million
time stamps per second. The usual approach builds a histogram per pixel, which
costs a great deal of memory. This RTL uses a different statistic. For every
pixel it keeps **four running sums of a spline function of the time stamp** (a
*spline sketch*) and a photon count. It sends them to the host only once per
acquisition of 512 frames. That cuts the output data by a factor of 512. The
host divides the sums by the photon count and solves for the time of flight in
closed form.

The data path is a reconstruction in SystemVerilog of the FPGA design by Zang,
Davies and Gyongy ("FPGA Implementation of Sketched LiDAR for a 192 × 128 SPAD
Image Sensor"). That design adds these sketch processing elements to the
existing firmware of a Quanticam sensor on an Opal Kelly XEM7310 board. The
structure, widths, depths and frame rules follow their description and block
diagram. The choices made here where the description is silent are listed in
[Departures and assumptions](#departures-and-assumptions).

## The statistic

With M = 4 sketch entries over a 4096-code time range, each entry covers
Δ = 1024 codes. For a time stamp X, sketch entry i (i = 0..3) accumulates

    phi_p(B_i),   B_i = (X − i·1024) mod 4096

Here phi_p is the periodic uniform B-spline of degree p, with support
[0, p+1)·Δ. A photon in interval j therefore contributes to entries j, j−1, …,
j−p. After n photons, ẑ_i = (1/n) Σ phi_p(B_i).

No arithmetic on phi is done in hardware. B is reduced to an 8-bit address
by dropping its 4 least significant bits, which maps the 4096 codes onto a
256-entry table. Three look-up ROMs per entry hold phi for p = 1 (hat), p = 2
(quadratic) and a "Fourier" function. The ROM values are unsigned fixed point
<16,7>: 16 bits, 7 of them fractional, so 1.0 = 128. A host-set selector
`p_sel` picks one of the three ROMs.

Only the table contents depend on the spline. They are computed at
elaboration by `sketch_pkg::phi_code()`, with values rounded to the nearest
code:

| kind | u = addr·4/256 (sketch intervals) | value |
|---|---|---|
| p = 1 | 0 ≤ u < 1 / 1 ≤ u < 2 / else | u / 2 − u / 0 |
| p = 2 | [0,1) / [1,2) / [2,3) / else | u²/2 / (−2u²+6u−3)/2 / (3−u)²/2 / 0 |
| Fourier | all | (1 + cos(2πu/4))/2 |

Dropping the 4 low bits of B rounds every time stamp down to the start of
its 16-code LUT step. On average that places a pulse 7.5 codes (0.3 ns) early.
The distance-sweep test shows this as a steady −8 bin bias. A host can
correct for it with a constant offset.

## Data path and timing

One time stamp enters per clock and nothing ever stalls:

```
batch (2 rows × 128 × 12 bit)
   │ piso            one time stamp per clock
   ▼
 x, valid ──► frame_ctrl      pixel counter Pxl_ctr, frame index 1..frame_target
   │                          acc  = 1 < frame < frame_target
   │                          last = frame == frame_target
   ├──► spe_array    4 × spe: diff = x − i·1024
   │                 B = diff > 0 ? diff[11:0] : diff + 4096
   │                 addr = B >> 4 → 3 ROMs → p mux        (1 clock)
   │                     │ 64-bit bus {B1,B2,B3,B4}
   ├──► sketch_accum ◄───┘  BRAM 24576 × 64: read at clock 0, write at clock 1
   ├──► pc_accum             BRAM 24576 × 16: +1 if x ≠ 0
   ▼
 readout_fifos   FIFO1 {z0,z1}, FIFO2 {z2,z3}, FIFO_PC (24576 × 32 each)
   ▼
 32-bit host port: rd_en, fifo_sel, fetch_pc → rd_data (1 clock later)
```

**Stage 0** is the clock in which the PISO shows a time stamp. In it, the
frame controller gives the pixel index and the frame decodes, each SPE
computes B and addresses its ROMs, and both accumulators issue a read of that
pixel's stored word.

**Stage 1** is the next clock. The ROM outputs and the stored words arrive
together. Each accumulator writes back either the sum of the two or the new
value alone, and on the last frame pushes the stored word into the FIFOs.

Each pixel is touched once per frame, so a read-modify-write never meets a
write to the same address. A gap-free frame takes exactly 24,576 clocks.
`frame_done` pulses on the last pixel.

The SPE's modulo step uses one subtractor, one comparator, one adder and a
multiplexer. `diff` is 32 bits wide. When diff = 0 the adder branch gives
4096, whose low 12 bits are 0, so the result is still correct.

## Frames, read-out and what the host receives

The frame rules decide what the numbers mean, and they are easy to misread:

* **Frame 1** writes the new phi values over whatever the BRAM holds. This
  restarts the sum, so the memories need no clearing and no reset.
* **Frames 2 … frame_target − 1** add to the stored sums.
* **Frame frame_target** (512) reads the stored sums of frames 1…511 and
  pushes them, with the photon count, into the three FIFOs, one pixel per
  clock. This frame's own values are written without adding and are then
  overwritten by the next frame 1. **Each acquisition therefore sums 511
  frames, and its last frame is discarded.** That is also why <16,7> cannot
  overflow: 511 × 128 = 65,408 < 2¹⁶.
* The frame counter then wraps to 1, so acquisitions follow each other
  without a pause. The host has 511 frames to drain the 3 × 24,576 words
  before the next read-out. A push into a full FIFO is dropped, and an
  assertion reports it in simulation.

Word formats on the 32-bit port:

| source | select | bits 31:16 | bits 15:0 |
|---|---|---|---|
| FIFO1 | fetch_pc = 0, fifo_sel = 0 | Σ phi for i = 0 | Σ phi for i = 1 |
| FIFO2 | fetch_pc = 0, fifo_sel = 1 | Σ phi for i = 2 | Σ phi for i = 3 |
| FIFO_PC | fetch_pc = 1 | 0 | photon count n |

Words come out in pixel order, which is the order of the time stamps inside
each batch (element 0 first).

**Empty frames are not filtered out of the sketch.** A time stamp of 0 goes
through the SPEs like any other value, as in the original block diagram. It
adds the fixed vector phi_p((−i·1024) mod 4096) to the sums: for p = 1 that is
1.0 on entry 3 and 0 elsewhere. The photon counter skips zeros, so the host
knows how many empty frames there were, (frame_target − 1) − n. It must
subtract that many times the fixed vector before normalising by n. The
distance-sweep test does exactly this.

The p = 1 sketch of a single pulse at time t in interval j has z_j ∝ frac and
z_{j−1} ∝ 1 − frac of t/1024. The simplest decoder is therefore
t ≈ 1024·(j + z_j/(z_{j−1}+z_j)), taking the adjacent pair with the largest
sum. The testbench uses it as a sanity check. The original work uses a
closed-form solver that is not reproduced here.

## Laser trigger

`stop_gen` makes the periodic STOP signal for the laser driver, which is also
the sensor's timing reference. It runs at 4.545 MHz, with a 50 % duty cycle
and a programmable delay in 10 ns steps. The source work uses such delays
(15 × 10 ns) to emulate a target moving away. The clock frequency is not
published, and 200 MHz is assumed, because streaming the published frame rate
at one pixel per clock needs at least 160 MHz. At 200 MHz the period is 44
clocks and a step is 2 clocks. The usable delay is 0…21 steps.

## Files

| file | role |
|---|---|
| `rtl/sketch_pkg.sv` | constants, `spline_e`, ROM formula `phi_code()` |
| `rtl/piso.sv` | batch → serial time stamps, gap-free `ready`/`load` handshake |
| `rtl/spline_rom.sv` | one 2^AW × 16 ROM, contents computed at elaboration |
| `rtl/spe.sv` | one sketch processing element (modulo, shift, 3 ROMs, p mux) |
| `rtl/spe_array.sv` | M SPEs, 64-bit bus, B1 in the MSBs |
| `rtl/frame_ctrl.sv` | Pxl_ctr, frame index, acc / last decodes |
| `rtl/sketch_accum.sv` | per-pixel 64-bit sum BRAM, two-clock read-modify-write |
| `rtl/pc_accum.sv` | per-pixel photon count BRAM |
| `rtl/sdp_ram.sv` | simple dual-port RAM template (read-first, registered read) |
| `rtl/sync_fifo.sv` | single-clock FIFO, any depth |
| `rtl/readout_fifos.sv` | FIFO1, FIFO2, FIFO_PC and the host read mux |
| `rtl/stop_gen.sv` | STOP / laser trigger with delay |
| `rtl/sketch_lidar_top.sv` | everything above, wired |

Top-level parameters (defaults = the published configuration):

| parameter | default | meaning |
|---|---|---|
| NPIX | 24576 | pixels per frame (192 × 128) |
| BATCH | 256 | time stamps per PISO batch (two rows) |
| TSW | 12 | time-stamp width |
| M | 4 | sketch size; SPE i subtracts i·2^TSW/M |
| AW | 8 | log2 LUT depth (the published study also evaluated 5…7) |
| DW / FRAC | 16 / 7 | fixed-point format of phi and its sums |
| CW | 16 | photon-count width (own choice) |
| FW | 10 | frame index width; `frame_target` is a runtime input ≤ 1023 |

At the defaults the memories come to 3.95 Mbit: 1.5 Mbit sketch BRAM,
0.375 Mbit count BRAM, 3 × 0.75 Mbit FIFOs and 12 small ROMs. M is a
parameter of the SPEs and accumulators, but the read-out is built for exactly
two 32-bit FIFO words per pixel (M = 4) and stops elaboration otherwise.

## Departures and assumptions

Taken from the published description: the equations for B and the
right-shift addressing; M = 4; LUT depth 256; <16,7>; the three ROM kinds per
SPE; the 64-bit bus; the BRAM accumulation with the printed frame conditions
`1<frame && frame<512` and `frame=512`; the photon counter rule; the three
24,576 × 32 FIFOs and the split i = 0,1 / 2,3; the `fifo_sel` / `fetch_PC`
controls; and the 4.54 MHz, 10 ns-step STOP signal.

This design's own choices:

* **Fourier ROM contents.** Only the name is published. The raised cosine
  above is a stand-in that fits the unsigned format. Replace
  `phi_code()` if the real function is known.
* **Spline convention.** The B-splines are uncentred (support [0, p+1)),
  which follows from the sum over q = 0..p in the sketch equation. The table
  values are not published.
* **No gating of empty pixels** in the sketch path (see above). This follows
  the block diagram rather than the equation, which sums over detected
  photons only.
* **Pipeline alignment.** The block diagram draws a register on the BRAM
  read address. Here the write address is delayed instead. The behaviour
  (read, then write one clock later) is the same.
* Bit order within the 64-bit bus and within FIFO words; `fifo_sel` = 0
  meaning FIFO1; `frame_target` as a runtime input; the frame counter
  wrapping to 1.
* Photon count width (16 bits), active-low asynchronous reset of the control
  registers, and no reset of the memories.
* The PISO handshake and the pixel order inside a batch. The sensor's own
  readout and decoding firmware, which fills the batch, is not described and
  is not included.
* A single clock domain. On the board the FIFOs also cross into the USB
  interface clock; that crossing and the USB 3.0 endpoint (vendor IP) are
  outside this RTL, and the FIFO read port stands in for them.
* The 200 MHz clock of the STOP generator. No timing closure has been done
  at any frequency.
* Two published figures disagree: a 5 ms exposure and about 6,500 frames/s.
  Neither affects the logic, which works per frame.

## Verification

Every testbench is self-checking. Each ends with
`TB_RESULT checks=N failures=F` and has a watchdog.

| testbench | what it checks |
|---|---|
| `spline_rom_tb` | all 256 entries of the three ROMs against integer B-spline formulas; 1-clock latency |
| `spe_tb` | SPE #1 and #3, edge and random time stamps, all three spline kinds |
| `spe_array_tb` | all four lanes every clock, lane order, valid |
| `frame_ctrl_tb` | counters and decodes with random gaps, several acquisitions |
| `sketch_accum_tb`, `pc_accum_tb` | per-pixel sums against a model, restart and read-out frames |
| `readout_fifos_tb` | word routing and halves, read latency, full / drop / empty |
| `piso_tb` | order, gap-free back-to-back batches |
| `stop_gen_tb` | period 44, width 22, delay of 2 clocks per step |
| `sketch_lidar_top_tb` | 16 pixels, 5 frames, 6 acquisitions cycling p = 1, 2, Fourier; every FIFO word checked; counts each mechanism (accumulate, read-out, empty pixel, diff = 0, wrap, each p, each read source, idle clocks, full-rate frame, STOP shift) |
| `sketch_lidar_full_tb` | default size: 24,576 pixels × 512 frames (12.6 M time stamps), all 73,728 words checked; about 6 s |
| `sketch_lidar_sweep_tb` | the distance sweep: STOP delay 0…15 × 10 ns, 512 frames each, words checked and ToF decoded within ±16 bins |

The reference values in `tb/sketch_ref_pkg.sv` use integer arithmetic on the
spline pieces, written apart from the RTL's formula. Each block's testbench was
also run against a deliberately broken copy of its module, and failed.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/sketch_pkg.sv tb/sketch_ref_pkg.sv tb/sketch_lidar_full_tb.sv \
  --top-module sketch_lidar_full_tb
./obj_dir/Vsketch_lidar_full_tb +verilator+rand+reset+2
```

Swap in any other testbench name. Block testbenches need only
`rtl/sketch_pkg.sv`, the package in `tb/` and their own file; `-y` finds the
rest. The `+verilator+rand+reset+2` option starts uninitialised state at
random values, which shows that nothing relies on a memory being cleared.
Lint warnings that remain are stylistic (ascending ranges for the
B1-first bus, unused package constants, and a note that `rst_n` also feeds the
assertions' `disable iff`).
