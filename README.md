# Look-up-table phase randomisation for a binary phase OSPR hologram generator

Holographic projectors compute, for every displayed frame, a pattern for a
spatial light modulator (SLM) whose far-field diffraction reproduces a target
image. Both common algorithms for this, Gerchberg-Saxton and One-Step
Phase-Retrieval (OSPR), start by giving every target pixel a random phase:
`R'(x,y) = |T(x,y)| * exp(2*pi*i*L)` with `L` uniform on [0,1). OSPR needs a
fresh set of random phases for each of its sub-frames, so that their speckle
patterns are independent and average out. In software this is a pseudo-random
number generator followed by a cosine and a sine per pixel. On an FPGA or DSP
that is an expensive pair of cores.

The idea implemented here, from P. J. Christopher and T. D. Wilkinson,
*Lookup tables for phase randomisation in hardware generated holograms*, is to
replace both cores with a small, fixed pool of precomputed phasors
`exp(2*pi*i*L_k)`, k = 0 .. N_LUT-1. The pool is read strictly in sequence and
wraps around. It is never restarted at a sub-frame or frame boundary. A pool
large enough never to repeat within a frame (N_x * N_y * N_SF entries, over
12 Mb for a 256x256 image with 24 sub-frames) would be indistinguishable from
a true random source. The paper's finding is that a far shorter, prime-length
pool costs little image quality: 10007 entries added under 5 % error to a
24-sub-frame OSPR image, and no visible difference on a 1024x1024 binary
ferroelectric display.

This RTL implements the per-pixel part of such a generator, with the
defaults that paper used on hardware: a 1024x1024 binary phase display,
24 sub-frames per frame and a 10007-entry pool.

## How the pool is walked

The pool pointer advances by one for every pixel, in raster order (x fastest,
then y), through every sub-frame and frame. With the paper's toy example of a
7-entry pool and a 4x4 image, the entries used are:

```
sub-frame 1            sub-frame 2            sub-frame 3
 0  1  2  3             2  3  4  5             4  5  6  0
 4  5  6  0             6  0  1  2             1  2  3  4
 1  2  3  4             3  4  5  6             5  6  0  1
 5  6  0  1             0  1  2  3             2  3  4  5
```

Sub-frame 2 starts at entry 16 mod 7 = 2, where sub-frame 1 stopped. In
general the pixel at (x, y) of sub-frame s (counting from 0) of frame f uses
entry `((f*N_SF + s)*NX*NY + y*NX + x) mod N_LUT`.

Since the order is fixed, the next address is always known. The address
generator is a counter with a compare against N_LUT-1. It needs no modulo
unit, and the read is a single memory access per pixel.

### Choosing N_LUT

The paper gives three rules for a short pool. The parameter is free, but a
pool that breaks them visibly degrades the image:

* **Prime length.** This avoids sharing a period with the image. A pool of
  exactly 256 entries on a 256-wide image gives every row the same phases,
  and the error spikes.
* **Longer than the number of sub-frames** (N_LUT > N_SF). Otherwise the same
  pixel gets the same phase in different sub-frames, and the sub-frames are
  no longer independent. This rule does not apply to Gerchberg-Saxton.
* **Longer than the larger image dimension.**

`ospr_lut_top` checks the three rules at elaboration and issues a `$warning`
for each one a parameter set breaks.

10007, the first prime above 10000, meets all three for 1024x1024 with 24
sub-frames. Because 1024*1024 mod 10007 = 7848, successive sub-frames start at
different places in the pool.

## Data path

```
            +------------------+    +--------------------------------+
 t_* ------>| raster_sequencer |--->|        phase_randomiser        |---> r_*  to the inverse
 |T(x,y)|   |  x, y, sub-frame |tag |  lut_addr_gen -> phase_lut    |          2-D Fourier transform
            |  boundary tags   |    |  |T|*cos_k , |T|*sin_k         |          (not included)
            +------------------+    +--------------------------------+

 h_* ------------------------------>  binary_quantiser  -------------> q_*  hologram bits to the
 Re(H(x,y)) from the transform        sign of Re(H)                        binary phase SLM
```

`ospr_lut_top` wires these together. Its ports are four valid/ready streams.
A word moves when `valid` and `ready` are both high at a rising clock edge.

| stream | direction | content |
|---|---|---|
| `t_*` | in | target amplitude `t_amp` (AMP_W bits, unsigned). The whole NX x NY image is sent in raster order once per sub-frame, N_SF times per frame. `t_sf` says which sub-frame the next pixel belongs to. |
| `r_*` | out | randomised replay field `r_re`, `r_im` (AMP_W+PH_W bits, signed), the tag `r_tag`, and the pool entry used, `r_lut_idx`. |
| `h_*` | in | real part of the diffraction field `h_re` (H_W bits, signed) with its tag, returned by the transform. |
| `q_*` | out | hologram bit `q_bit` (1 = phase pi) with its tag. |

The tag (`lutpr_pkg::pix_tag_t`) has four flags:

* `sosf`: first pixel of a sub-frame.
* `eosf`: last pixel of a sub-frame.
* `sof`: first pixel of a frame.
* `eof`: last pixel of a frame.

The transform and the display use them to find boundaries.

Timing:

* `t_*` to `r_*`: 2 cycles of latency, one pixel per clock.
* `h_*` to `q_*`: 1 cycle of latency, one pixel per clock.

Each pipeline stalls as a whole while its output is not taken
(`ready_in = !valid_out || ready_out`). The pool pointer moves only when a
pixel is accepted, so back-pressure never skips or repeats an entry. The two
halves are independent, so a frame-buffered transform can hold a whole
sub-frame between them. A full frame at the default size takes
25,165,824 + 3 clocks from the first target pixel to the last hologram bit.

## The pool memory (`phase_lut`)

Each entry holds the phasor, not the phase. That is what removes the sine and
cosine from the data path. Entry k is

```
u_k   = lowbias32(SEED + k)                       (32-bit integer hash)
L_k   = u_k / 2^32
cos_k = floor(127 * cos(2*pi*L_k) + 1/2)          (PH_W = 8: signed 8 bits, A = 2^(PH_W-1)-1)
sin_k = floor(127 * sin(2*pi*L_k) + 1/2)
lowbias32(v): v ^= v>>16; v *= 0x7feb352d; v ^= v>>15; v *= 0x846ca68b; v ^= v>>16
```

The values are computed at elaboration, one constant per entry, by
`lutpr_pkg::pool_entry`. That function uses a 16-step integer CORDIC, so that
simulators and synthesis front ends can evaluate it without real arithmetic.
The CORDIC agrees with floating-point cos/sin to within one unit; in the
default pool, nearly every entry is exact. No table file is needed. At the
default size the memory is 10007 x 16 = 160,112 bits with one synchronous
read port.

The randomiser multiplies the amplitude by both components at full precision.
`r_re` and `r_im` are 16-bit signed, with no rounding.

## Binary quantisation (`binary_quantiser`)

A binary phase pixel can only be +1 or -1. The nearest of the two to a sample
H depends only on the sign of Re(H), so the quantiser emits `q_bit = (Re(H) < 0)`.
The imaginary part is not needed and is not an input. A sample with
Re(H) = 0 is equally far from both levels; it is given phase 0.

## What is not included

* **The inverse 2-D Fourier transform.** The source paper only states the
  transform and relies on standard FFT algorithms. Its buffering, precision
  and scheduling are outside this RTL, and its two streams are top-level
  ports. The small-size testbench uses a behavioural floating-point inverse
  DFT (`tb/idft2d_model.sv`) in its place. The full-size testbench connects
  `r_re` straight back to `h_re`.
* **The target-image source and the display.** Both are external. The source
  must repeat the image once per sub-frame.
* **Gerchberg-Saxton.** The pool can supply GS's random phases in the same
  way, but only the OSPR pipeline is built here. The randomiser itself does
  not depend on the algorithm.

## Choices not fixed by the paper

The following are choices made for this implementation, not taken from the
paper:

* The pool's random source: a hash of the entry index with a fixed seed.
* The CORDIC.
* All widths: amplitude 8 bits, phasor components 8 bits, Re(H) 24 bits.
  The paper's 12 Mb estimate for a full-length table implies about 8 bits
  per entry.
* The valid/ready handshakes and the pipeline depths.
* The boundary tags.
* Synchronous active-low reset. Reset returns the pool pointer to entry 0
  and the raster to pixel (0,0) of sub-frame 0.
* The tie rule of the quantiser and its bit encoding.

The raster order, the pool's cyclic continuation across sub-frames and
frames, the phasor form `|T| * exp(2*pi*i*L_k)`, the binary quantisation and
the default sizes all follow the paper.

## Sizes the paper evaluates

* **Hardware validation.** 1024x1024, 24 sub-frames, N_LUT = 10007: these are
  the defaults, simulated end to end for a whole frame. At one pixel per
  clock, 60 frames/s would need about 1.5 Gpixel/s. That means either a very
  fast clock or several copies of the randomiser, each starting at its own
  pool offset. The paper states no frame rate for this display.
* **Simulation study.** 256x256 (also 128x128 and 64x64), 24 sub-frames,
  prime N_LUT from 2 up to N_x*N_y. This needs re-elaboration with `NX`,
  `NY` and `N_LUT` set accordingly; all three are parameters. A 65,536-entry
  pool would take 1 Mbit at 16 bits per entry.

## Pool length and image quality, at small size

`tb/tb_ospr_workload.sv` runs the complete OSPR loop around the RTL. For each
of 24 sub-frames it does the following:

1. Stream the target through the randomiser.
2. Apply a floating-point inverse DFT.
3. Send Re(H) back through the quantiser.
4. Rebuild the +1/-1 hologram from the bits.
5. Compute the replay field with a forward DFT and add its intensity.

The time-averaged intensity is then compared with the target intensity. The
error is `sum (a*I - T^2)^2 / sum T^4` with the best scale `a`, taken over
the half of the replay plane that holds the target. The runs use a 64x64
image, the smallest size in the paper's study. Results for one synthetic
target of bars and a square:

| N_LUT | what it tests | relative error |
|---|---|---|
| 23 | shorter than the 24 sub-frames | 0.249 |
| 64 | equal to the row length: every row gets the same phases | 0.619 |
| 1031 | prime, about a quarter of NX*NY | 0.0386 |
| 4099 | prime, longer than NX*NY: no repetition within a sub-frame | 0.0383 |

This reproduces the behaviour the paper reports. A prime pool of a quarter of
the image size is within 1 % of one that never repeats inside a sub-frame. A
pool whose length matches the image period, or one shorter than the number
of sub-frames, is much worse. The testbench requires the row-periodic pool to
be at least 20 % worse than both primes, and the long prime to be no worse
than the 23-entry pool. It also checks every pixel's pool entry and hologram
bit.

## Files

| file | content |
|---|---|
| `rtl/lutpr_pkg.sv` | default sizes, pixel tag, pool generator functions |
| `rtl/phase_lut.sv` | the pool memory |
| `rtl/lut_addr_gen.sv` | cyclic pool pointer |
| `rtl/raster_sequencer.sv` | x / y / sub-frame counters and tags |
| `rtl/phase_randomiser.sv` | pointer + pool + two multipliers, 2-stage stream pipeline |
| `rtl/binary_quantiser.sv` | sign decision, 1-stage stream pipeline |
| `rtl/ospr_lut_top.sv` | top level |
| `tb/tb_ref_pkg.sv` | floating-point reference of the pool |
| `tb/idft2d_model.sv` | behavioural inverse 2-D DFT, for small images only |
| `tb/ospr_workload_run.sv` | one full OSPR experiment (transforms, quantisation, replay error) around the top |
| `tb/tb_*.sv` | self-checking testbenches |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops; each has a
cycle watchdog. Build and run one with Verilator 5 from the folder that
contains `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/lutpr_pkg.sv tb/tb_ref_pkg.sv tb/tb_ospr_lut_top.sv \
    --top-module tb_ospr_lut_top -Mdir obj -o sim
./obj/sim
```

The testbenches:

* `tb_phase_lut`: all 10007 entries against the floating-point reference
  (within one unit), the read latency, holding with `rd_en` low, and the
  mean of the phasors.
* `tb_lut_addr_gen`: 7- and 10007-entry pointers under random steps, with
  wrap and reset.
* `tb_raster_sequencer`: counters and tags of a 4x3 raster with
  2 sub-frames.
* `tb_phase_randomiser`: 7-entry pool, random gaps and stalls. It checks the
  entry sequence, the products and the tags, and, at full rate, the 2-cycle
  latency and one pixel per clock.
* `tb_binary_quantiser`: sign decisions including 0 and the most negative
  value, stalls, and the 1-cycle latency.
* `tb_ospr_lut_top`: the toy example above end to end (7-entry pool, 4x4,
  3 sub-frames, 2 frames) through the behavioural inverse DFT, with a display
  that is randomly not ready.
  * It checks the entries printed in the paper's example figure, the
    products, the tags, and that every hologram bit is the sign of the
    returned field.
  * It requires each of the following to happen at least once: a pool wrap,
    a sub-frame starting mid-pool, a complete frame, back-pressure from the
    transform, back-pressure from the display, and both bit values.
* `tb_ospr_workload`: the pool-length study above (about 4 s).
* `tb_ospr_lut_full`: one full frame at the default parameters
  (25,165,824 pixels, about 20 s). Every pixel is checked, together with the
  exact cycle count and the number of pool wraps (2514).

To change a size, override the top's parameters: `NX`, `NY`, `N_SF`, `N_LUT`,
`AMP_W`, `PH_W`, `H_W` and `SEED`. `N_LUT` must be at least 2. Elaboration
time grows with `N_LUT`, since every entry is computed as a constant.
