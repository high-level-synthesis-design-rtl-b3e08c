# A single-device delay-and-sum beamformer for steered plane-wave ultrasound

Ultrafast ultrasound fires a plane wave, records every element of the probe,
and forms a whole image from that one shot. The costly part is the receive
beamforming. A classic delay-and-sum (DAS) beamformer needs a separate delay
for every pixel and every element: a D x W x F table per steering angle. That
is about 320 Mb for 2,560 depths, 128 lines and a 64-element subaperture.
Computing the delays on the fly instead means a square root per pixel and
element. This RTL avoids both with three ideas:

1. **Delay compression.** Each channel's record is shifted in time to remove
   the transmit delay of the steered wave. After that shift, the round-trip
   delay depends only on the depth z and on the lateral offset
   dx = x_element - x_pixel. It no longer depends on where the pixel is. The
   whole profile shrinks to D x F entries, small enough to keep on chip.
2. **Delay reuse with vector fetches.** Every pixel of one depth row uses the
   same F delays. So each delay index fetches a whole RF row: one sample from
   every channel, 128 x 16 = 2,048 bits.
3. **Diagonal summing.** Stack the F fetched rows. The samples that belong to
   one pixel lie on a diagonal of that stack, and the next pixel lies on the
   next diagonal. A fixed adder network (no multipliers) therefore produces
   every pixel of the row at once.

By default, one depth row of 128 pixels is produced every 8 clock cycles. One
frame of 1,280 raw samples (2,560 depths after interpolation) takes
2,560 x 8 = 20,480 cycles in the DAS core.

## Data flow

```
 raw rows        interpolated rows      compensated rows            beamformed rows
 (W_I x 16b) --> lin_interp --> tx_delay_comp --> das_core  x R --> (W_I*R x 23b)
                  x2 in z        drop N_remove[n]    |  delay_profile_mem (D x F)
                                 samples per channel |  rf_buffer x F_SUB (cyclic, MDR rows)
                                                     |  diag_sum  -> row_accum
```

A *row* always means one fast-time sample from every channel. All inter-block
links are valid/ready streams of whole rows. A transfer happens in a cycle
where both valid and ready are high. No ready output depends on the matching
valid input.

| Parameter | Meaning | Default |
|---|---|---|
| `W_I` | receive channels = output A-lines per core | 128 |
| `F` | subaperture size (delay entries per depth) | 64 |
| `F_SUB` | RF buffers read per cycle; a depth takes `K = F/F_SUB` cycles | 8 |
| `R` | identical cores, each with its own delay profile; `W_O = W_I*R` | 1 |
| `D_RAW` | raw samples per channel per frame; `D = 2*D_RAW` after interpolation | 1280 |
| `MDR` | maximum dependent range = depth of the cyclic RF buffers, in rows | 150 |
| `MTD_MAX` | largest transmit-delay removal supported, in samples | 256 |

The defaults are the 128-channel configuration (device-class "setting 2").
The other three published configurations are parameter sets of the same RTL:

| Setting | `W_I` | `F` | `F_SUB` | `R` | cycles per depth |
|---|---|---|---|---|---|
| 1 (small, low power) | 64 | 32 | 4 | 1 | 8 |
| 2 (default) | 128 | 64 | 8 | 1 | 8 |
| 3 (highest frame rate) | 128 | 64 | 16 | 1 | 4 |
| 4 (finer lateral grid) | 128 | 64 | 8 | 2 | 8 |

`tb_bf_settings` builds settings 1, 3 and 4 side by side and runs two
full-length frames through each. All three are pixel-exact, with frame
periods of 20,480, 10,240 and 20,480 cycles.

## The delay model the hardware assumes

Pixel (x, z), element n at x_n, plane wave steered by theta, sound speed c:

* transmit: `tau_tx = (z cos(theta) + x sin(theta)) / c`
* receive: `tau_rx = sqrt(z^2 + (x_n - x)^2) / c`

With `dx = x_n - x`, we have `x = x_n - dx`. The transmit term then splits into
`x_n sin(theta)/c`, which depends only on the element, and
`(z cos(theta) - dx sin(theta))/c`. The element-only part is removed by
discarding the first

    N_remove[n] = x_n * sin(theta) * fs / c

samples of channel n (`tx_delay_comp`). What is left,

    tau(theta, dx, z) = (z cos(theta) - dx sin(theta) + sqrt(z^2 + dx^2)) / c,

is the delay profile. The host computes it once per probe and angle, in units
of interpolated samples, and loads it into `delay_profile_mem`. The RTL never
evaluates these formulas. It only uses the indexes it is given, so any probe,
angle or sound speed works without rebuilding the design.

Lateral positions are in element pitches. Output pixel pitch equals element
pitch. That equality is what makes the diagonals work. Entry `j` of a depth
(0 <= j < F) stands for `dx = j - F/2`, so pixel x takes channel
`x + j - F/2` from row `idx(z, j)`. Channels outside 0..W_I-1 add nothing.
With R > 1, core r is loaded with a profile computed for pixels shifted by
r/R pitch. Its pixel x is output column `x*R + r`.

### Delay profile word format

One entry is 16 bits (`bf_pkg::delay_t`): bit 15 `en`, bits 14:0 `idx`.
`idx` is the row of the transmit-compensated, interpolated frame (0..D-1).
`en = 0` removes the entry from the sum. This is how a depth-dependent
aperture is expressed. The shallow region uses a smaller subaperture at a
fixed F-number, which limits how far apart the delays of one depth can be.
Word `z*K + k` of the profile holds entries `k*F_SUB .. k*F_SUB+F_SUB-1` of
depth z. Load the words in address order through `dp_valid`/`dp_data` after a
`dp_restart` pulse. With R > 1, `dp_sel` picks the core. `dp_done` rises when
every core has a full profile. Load while no frame is running.

## Inside a DAS core: 8 cycles per depth

For depth z, cycle k (k = 0..K-1) of `das_core` covers subaperture entries
`k*F_SUB .. k*F_SUB+F_SUB-1`:

| stage | what happens |
|---|---|
| issue | read profile word `z*K + k`: F_SUB indexes plus enables |
| 1 | RF buffer s (s = 0..F_SUB-1) reads row `idx_s mod MDR` |
| 2 | `diag_sum`: F_SUB-row stack -> W_I+F_SUB-1 diagonal sums `p[m] = sum_s row_s[m+s]` |
| 3 | `row_accum`: `acc[x] += p[x + k*F_SUB - F/2]`; after k = K-1 the row is output |

The F_SUB RF buffers hold identical data. Every incoming row is written to
all of them, so F_SUB different rows can be read in one cycle while each
memory keeps one read port and one write port. The diagonal network is fixed
wiring plus adders. Only the final alignment is a K-way choice per pixel.
Sums are kept at full precision: 20 bits per diagonal and 23 bits per output
pixel, enough for 64 signed 16-bit samples with room to spare.

### Cyclic RF buffer and flow control

One depth only needs RF rows within its *dependent range*: the span from its
smallest to its largest enabled index. The largest such span in a frame is
the MDR. Each buffer therefore holds only MDR rows, addressed by the row's
position in the input stream modulo MDR. With the default probe geometry that is 150 rows instead of
2,560.

The profile gives the rows a depth needs, but not when they have arrived, so
the core tracks this itself:

* While the profile loads, `delay_profile_mem` records each depth's lowest
  and highest enabled index (`lo(z)`, `hi(z)`).
* Row indexes are counted relative to the frame whose depths are being
  issued (`wr_rel`). When the last depth of a frame is issued, D is
  subtracted, so rows of the next frame that already arrived get indexes
  0, 1, ... and rows of the old frame still being read get negative ones.
  The buffer position of each frame's row 0 (`base`) moves on by
  `D mod MDR`; a read address is `base + idx`, taken modulo MDR.
* A depth is issued only once a complete profile is loaded and row `hi(z)`
  has been written.
* A row is accepted only while `wr_rel < lo + MDR`. Here `lo` is the lower
  bound of the oldest depth still reading. This guarantees no row is
  overwritten while a pending read still needs it.
* No gap is needed between frames: the next frame's rows flow in while the
  last depths of a frame are formed. Every frame must bring exactly D rows.

Two conditions on the profile make this safe. `lo(z)` must never decrease
with z, which holds for any physical plane-wave profile. Every dependent range
must be shorter than MDR; an assertion in `das_core` checks this. A profile
that breaks the first condition gives wrong pixels. One that breaks the
second stops the core.

## Transmit delay compensation with few RAMs

Conceptually every channel is a FIFO. It is written once the sample counter N
reaches `N_remove[n]`, and all channels are read together once N reaches
MTD, the largest removal. Output row m of channel n is then input row
`m + N_remove[n]`. Each channel is thus a fixed delay line of
`MTD - N_remove[n]` rows, which lets frames of one steering angle run
through it back to back.

One block RAM per channel would waste RAMs, since each FIFO is only MTD deep.
The DAS core needs a row only every K cycles, so the stage handles just
`NBANK = W_I/K` channels per cycle. Each of the NBANK simple dual-port RAMs
(`sdp_ram`) holds K channel FIFOs back to back: channel c lives in bank
`c mod NBANK`, region `c div NBANK`, and the RAM is `MTD_MAX*K` deep. The
defaults give 16 RAMs of 2,048 x 16 bits instead of 128 small ones. Each
channel keeps its own write pointer. The read pointer is shared, since every
channel starts reading at the same N.

Two details matter:

* **Same-address access.** The RAMs are read-first. A channel with
  `N_remove = 0` reads and writes the same address in the same cycle and
  correctly gets the sample written MTD rows earlier.
* **Empty FIFO.** A channel with `N_remove = MTD` has nothing stored, so its
  input is forwarded directly.

Frames are streamed without gaps: the first MTD steps of a frame produce the
last MTD output rows of the frame before. A sample whose source row
`m + N_remove[n]` lies past the end of its frame is output as zero. If no
input row is offered once a frame has been fully taken in, the stage
finishes that frame by itself with MTD zero-row steps (a flush) and then
restarts the stream. Only then may `cfg_mtd` and `cfg_n_remove` change; they
must satisfy `cfg_n_remove[n] <= cfg_mtd <= MTD_MAX`.
For negative angles, the host numbers the elements from the other end so that
all removals stay non-negative.

## Interpolation

`lin_interp` doubles the fast-time sampling. For raw rows r0 .. r(D_RAW-1) it
emits `r0, (r0+r1)/2, r1, ..., r(D_RAW-1), r(D_RAW-1)`. The mean is
`floor((a+b)/2)`. The last raw row is repeated so that a frame has exactly
D = 2*D_RAW rows. The block accepts one raw row every three cycles at most,
well above the one-per-2K cycles the core consumes.

## Timing

* DAS core: one depth every K cycles whenever its rows are present, plus
  4 cycles of pipeline latency. `tb_das_core` checks exactly (2D-1)*K cycles
  between the first row of one frame and the last row of the next, with the
  input running ahead, so no cycle is lost at the frame boundary.
* End to end, input rows reach the core at the same rate it consumes depths:
  one row per K cycles from `tx_delay_comp`. At the start of a stream the
  core waits for the transmit stage's MTD steps and for each depth's lead over
  the input. With the default size and the mouse-brain geometry below, the
  first frame took 21,336 cycles from its first to its last output row
  ((D-1) x 8 = 20,472 plus 108 x 8 of waiting), and 22,151 cycles counted from
  the first raw row accepted.
* Frames that follow without a pause cost exactly D*K cycles each: in the
  full-size test the second frame ended 20,480 cycles after the first.
* At the ~300 MHz the original implementations reached, 20,480 cycles per
  frame is about 14,800 frames/s for 128 x 2,560 pixels.

## Interfaces of `bf_top`

| port | dir | width | use |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset of control state (memories are not reset) |
| `cfg_mtd`, `cfg_n_remove[W_I]` | in | 9 each | transmit compensation for the current angle |
| `dp_restart`, `dp_valid`, `dp_sel`, `dp_data`, `dp_done` | in/out | 1,1,1,`F_SUB*16`,1 | delay profile load |
| `raw_valid`, `raw_ready`, `raw_row` | in/out/in | `W_I*16` | raw RF rows, channel c in bits `16c+15:16c` |
| `bf_valid`, `bf_ready`, `bf_row` | out/in/out | `W_I*R*23` | beamformed rows, signed, column `x*R+r` |
| `frame_done` | out | 1 | one-cycle pulse when core 0 issues the last depth of a frame (its row leaves 4 cycles later) |

In a complete system, the raw rows and the beamformed rows would be moved to
and from external DDR4 memory by memory-mapped AXI4 masters. The raw rows are
W_I x 16 = 2,048 bits wide at the default size. The JESD204B links from the
analog front ends would fill that memory. None of those parts are included
here. The streams are the boundary.

## What follows the published design and what is this RTL's own

Taken from the published design:

* the delay compression and the per-channel sample removal;
* x2 linear interpolation by the mean of two buffered rows;
* the FIFO write/read rule of the transmit stage and its banked,
  time-interleaved RAM layout;
* delay reuse with full-row vector fetches;
* F_SUB identical cyclic RF buffers of MDR rows with modulo addressing;
* diagonal sums and the K-cycle align-and-sum schedule;
* R identical cores for a finer lateral grid;
* all default sizes (128/64/8/1, 1,280 raw samples, MDR 150, 16-bit data and
  delays).

Choices made here, where the design description says nothing:

* all handshakes and the reset scheme;
* the enable bit in the delay word for the reduced shallow aperture;
* dx = j - F/2 indexing of the subaperture;
* recording each depth's bounds during loading and using them for flow
  control;
* the repeated last interpolated row;
* back-to-back frame streaming (relative row indexes in the core, a
  continuous delay line in the transmit stage), the flush when the input
  pauses, and the forwarding of empty FIFOs;
* read-first RAMs;
* `MTD_MAX = 256`, taken from a 2,048-deep RAM divided over K = 8 channels;
* full-precision output width and floor rounding of the interpolation.

Known departures:

* The original high-level-synthesis build reports 23 cycles of pipeline
  latency per frame. This RTL has 4.
* When the input pauses between frames, the transmit stage spends MTD*K
  cycles on a flush, and the next frame pays the stream start-up again.
* Dynamic apodization is not part of the design: every enabled entry has
  weight one.
* Compounding and IQ demodulation are not part of the design either.

## Which acquisitions the default build holds

* **128-element high-frequency linear array, 4-degree steering, 125 MHz
  sampling, 1,280 samples.** Fits. With a pitch of about 0.069 mm, MTD is 99
  samples and the largest dependent range is 112 rows, within 256 and 150.
* **64-channel, F = 32 data (setting 1).** Fits: use 64 channels and disable
  the unused profile entries.
* **16 buffers (setting 3) or two cores (setting 4).** These need
  `F_SUB = 16` or `R = 2` respectively. The default build runs the same data
  at 8 cycles per depth, with 128 lines.
* **128-element array at 0.3 mm pitch, steered to 18 degrees, 31.25 MHz.**
  This needs an MTD of about 478 samples, so set `MTD_MAX = 512`. The
  steep angle also widens the dependent range to about 252 rows (assuming
  1,280 raw samples and F-number 1), so MDR must grow as well;
  `tb_bf_settings` runs this build with `MDR = 320`.

## Verification

Every block has a self-checking testbench in `tb/`. Each compares against
values computed in the testbench, has a watchdog, and prints
`TB_RESULT checks=N failures=M`.

| testbench | covers |
|---|---|
| `tb_sdp_ram` | read/write, read-first collisions, held read register |
| `tb_lin_interp` | exact interpolated sequence over 3 frames, random valid/ready |
| `tb_tx_delay_comp` | removal per channel incl. `N_remove` = 0 and = MTD, zero tail, K-cycle row spacing across two back-to-back frames, flush after an input pause |
| `tb_rf_buffer` | modulo-MDR addressing over a long run |
| `tb_delay_profile_mem` | stored words, per-depth bounds, masked depths, reload |
| `tb_diag_sum` | all diagonals with random masks |
| `tb_row_accum` | alignment and summation with stalls |
| `tb_das_core` | pixel-exact DAS over three frames, exact (2D-1)*K timing over two back-to-back frames, buffer wrap at a different place each frame, writer throttling |
| `tb_bf_top` | end to end with R = 2 at reduced size; counts back-pressure, forwarding, masked entries, buffer wrap, guard stalls, row waits, interpolator tail, frame completions, next-frame rows written early and transmit flushes; no gap between two full-rate frames |
| `tb_bf_full` | two back-to-back full-size frames (defaults, physical 4-degree profile) checked pixel by pixel, 655,360 pixels; the second frame must end exactly D*K cycles after the first |
| `tb_bf_settings` | settings 1, 3 and 4 (64/32/4/1, 128/64/16/1, 128/64/8/2) and an 18-degree phantom build (`MTD_MAX = 512`, `MDR = 320`) at full frame length, two back-to-back frames each, checked pixel by pixel; frame period D*K per build |

`bf_model_pkg` is the reference model: interpolation, sample removal and DAS
written directly from the definitions above.

Run one testbench with plain Verilator from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb rtl/bf_pkg.sv tb/tb_bf_top.sv \
          --top-module tb_bf_top -Mdir obj_tb_bf_top -o sim
./obj_tb_bf_top/sim +verilator+rand+reset+2
```

The full-size test builds and runs in about 15 seconds. All sizes are module
parameters. The testbenches other than `tb_bf_full` override them to keep the
runs short.
