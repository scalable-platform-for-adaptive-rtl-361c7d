# SPARC: an adaptive-optics real-time controller core in SystemVerilog

An adaptive-optics (AO) system measures the distortion of incoming starlight
with a Shack-Hartmann wavefront sensor and corrects it with a deformable
mirror, hundreds to thousands of times a second. Each frame, the controller
must turn sensor pixels into mirror actuator commands:

1. find the spot of every subaperture (a small p x p pixel patch) and take its
   centre of gravity: two *slopes* per subaperture;
2. multiply the slope vector by a large, precomputed *reconstruction matrix*
   to get the residual phase at every actuator;
3. integrate the residual into the actuator commands and send them to the mirror.

For a sensor with n x n subapertures in Fried geometry there are 2n^2 slopes
and (n+1)^2 actuators, so the matrix is (n+1)^2 x 2n^2. At n = 50 that is
2601 x 5000 coefficients, 26 MB in 16-bit fixed point. It lives in external
DRAM and has to be read in full every frame, so **memory bandwidth, not
arithmetic, sets the speed**.

The architecture implemented here follows the SPARC design (Surendran et al.,
"Scalable Platform for Adaptive optics Real-time Control, Part 1"). Its main
idea is to work **one row of subapertures at a time**:

* as soon as the pixels of one row of subapertures (p sensor lines) have
  arrived, their n slope pairs are computed;
* the x-slopes of that row multiply one (n+1)^2 x n block of the matrix and
  the y-slopes another. The two blocks are fetched from memory and multiplied
  while the next row's pixels are still arriving;
* the logic therefore depends only on p and on how many coefficients the
  memory delivers per clock, not on n. One build serves any n up to
  `MAX_NSUB` and any p up to `PIX_SIDE`, chosen at run time.

Everything in `rtl/` is synthesizable. There are three clocks. Pixels are
taken on a pixel clock and the external memory runs on a memory clock.
Slope computation, reconstruction and everything after it run on the core
clock. The DRAM, its controller, the host link (PCIe in the original system),
the camera and the mirror driver are outside the core. Their data streams are ports of
`sparc_top`.

## Data path

```
 pixels ─► async_fifo ─► wpu ─────────────────► ao_reconstructor ─► phase_integrator ─► act_cond ─► actuators
 (pix_clk)  (to clk)    pixel_acq → cog_slope → (per row: request      phi += g*r - l*phi   clamp, 16 bit,
                        slope_lin_offset → FIFO X then Y part,                              one per clock
                                                64-lane MAC)
                                                   ▲ sub-matrix words
 matrix (host) ─► mem_sm ── matrix FIFO ───────────┘
                    │ ▲
            async_fifo async_fifo    (clk to mem_clk and back)
                    ▼ │
              external memory port (mem_clk)
```

| module | role |
|---|---|
| `async_fifo` | dual-clock FIFO: pixels into the core clock, memory commands out to the memory clock, read data back |
| `sparc_pkg` | number formats, `slope_pair_t`, `part_e`, saturation helper |
| `pixel_acq` | banked, double-buffered pixel store, one subaperture readable per clock |
| `cog_slope` | centre-of-gravity slopes, fully pipelined, 1 subaperture/clock (uses `pipe_div`) |
| `pipe_div` | pipelined restoring divider |
| `slope_lin_offset` | optional linearization table and per-subaperture offsets |
| `wpu` | wavefront processing unit: the three above plus a controller and output FIFO |
| `mem_sm` | memory state machine: matrix load, sub-matrix reads, matrix FIFO |
| `sync_fifo` | FIFO used for the matrix stream and the slope stream |
| `ao_reconstructor` | row-by-row matrix-vector product, accumulators for all actuators |
| `phase_integrator` | leaky integrator with gain, phase memory |
| `act_cond` | actuator thresholds and output serializer |
| `sparc_top` | the core |

## The row-of-subapertures schedule

This is the part that makes the design work, and the part to understand
before changing anything.

**Pixel side (`pixel_acq`, `wpu`).** Pixels arrive in raster order, one per
clock: a frame is n*p lines of n*p pixels. Pixel (x, y) is written to bank
`(y mod p)*PIX_SIDE + (x mod p)` at word `x div p`. All p*p pixels of
subaperture j then sit at the same address j in p*p different banks, and one
read returns the whole subaperture. Counters do the mod/div, so no divider is
needed. A row of subapertures fills one of two buffers. When it is full, the
WPU controller reads its n subapertures on n consecutive clocks, while the
next row is written into the other buffer. If both buffers are full,
`pix_ready` drops and the pixel source stalls.

**Slopes.** `cog_slope` has an 18-clock pipeline (moments, scaling, 15
divider stages, sign). The controller reads a subaperture only when the
WPU's 64-entry output FIFO has room for it and for everything still in the
pipeline, so the pipeline never has to stall. Slopes leave the WPU in
subaperture raster order. Subaperture k = r*n + j owns slope column k (x)
and n^2 + k (y).

**Reconstructor (`ao_reconstructor`).** Its state machine loops per row of
subapertures:

| state | does | leaves when |
|---|---|---|
| `WAIT_SLOPES` | stores the n slope pairs of row r | n pairs taken |
| `REQ` | asks `mem_sm` for (r, X), later (r, Y) | request accepted |
| `MAC` | takes n*S matrix words, one per clock; lane l of word w adds coef*slope to actuator w*64+l | last word |
| `CHECK` | after X: go back to `REQ` for Y; after Y: next row, or `DRAIN` after row n-1 | one clock |
| `DRAIN` | hands the S accumulator words to the integrator and clears them | S words taken |

S = ceil((n+1)^2 / 64) is the number of 64-coefficient memory words per
matrix column. The accumulators form a 41-word memory (for n = 50) of 64 x
48-bit values. It is updated by read-modify-write in a single clock, so
back-to-back words to the same address need no stall.

**Overlap.** While the reconstructor is in `MAC` for row r, the WPU computes
row r+1's slopes into its FIFO and `pixel_acq` takes row r+2's pixels. For
large n the frame time is set almost entirely by the 2n^2*S matrix words
the memory must deliver. At n = 50 that is 205,000 words of 128 bytes.

## Matrix storage and streaming (`mem_sm`)

The host streams the matrix as 1024-bit words (64 coefficients), and
`mem_sm` writes them to consecutive addresses from 0. The word marked
`mat_last` sets `matrix_ready`, and a new load clears it. The host must
already have put the matrix in this layout:

* column-major: one column per slope, x-slope columns 0..n^2-1 first, then
  y-slope columns n^2..2n^2-1;
* each column padded with zeros to S words. Lane l of word w of column c
  holds element (w*64 + l, c).

With this layout each sub-matrix the reconstructor needs is one contiguous
block of n*S words:

* X part of row r: starts at word `r*n*S`;
* Y part of row r: starts at word `(n^2 + r*n)*S`.

A read request therefore becomes a single linear burst. `mem_sm` issues a
read only when the matrix FIFO (64 words) has room for it and for every read
still outstanding. So any memory latency, and any stall of the consumer,
is absorbed without overflow. The memory may answer any number of clocks
later, as long as answers come back in order.

The memory port is a plain command interface (`mem_cmd_valid/ready`, `we`,
word address, write data) plus in-order read data (`mem_rd_valid/data`), the
shape of an FPGA DDR controller's user port. 64 coefficients x 16 bits per
clock at 200 MHz is 25.6 GB/s, the combined bandwidth of the two DDR3
modules the original system used.

The memory port sits on its own clock, `mem_clk`, the memory controller's
user clock. Inside `sparc_top` two dual-clock FIFOs (`async_fifo`) link it
to the core clock. Commands (write flag, address, write data) cross through
a 4-deep FIFO. Read data crosses through one as deep as the matrix FIFO.
The read side cannot be stalled: a DDR controller returns data when it
has it. `mem_sm` counts words in that crossing as outstanding reads, so
the credit rule above also keeps it from overflowing. An assertion checks
this.

## Number formats

| quantity | format |
|---|---|
| pixel | 16-bit unsigned |
| slope | 16-bit signed, 12 fractional bits, in pixels (+1.0 px = 0x1000), truncated toward zero; a zero-flux subaperture gives 0 |
| matrix coefficient | 16-bit signed, scaling chosen by the host |
| accumulator | 48-bit signed (cannot overflow for 5000 products of 16 x 16 bits) |
| residual r | accumulator >>> `cfg_res_shift`, saturated to 32 bits |
| phase | 32-bit signed, same LSB as the 16-bit actuator value |
| gain, leak | unsigned Q1.15, 0x8000 = 1.0 |

The centre of gravity is `sx = sum((x - (p-1)/2) * I) / sum(I)`, likewise for
y. Internally the weights are in half pixels, so the division is
`(|2C| << 11) / S` with the sign reapplied.

Slope corrections (`slope_lin_offset`, each can be switched off):
`s1 = sat16(s + LIN[idx])` with `idx = {~s[15], s[14:6]}` (a 1024-entry
correction table in offset binary), then `s2 = sat16(s1 - OFFX[k])` for x or
`s1 - OFFY[k]` for y.

Integrator, per actuator:
`phi = sat32(phi + (gain*r >>> 15) - (leak*phi >>> 15))`. With gain 1.0 and
leak 0 this is plain "add the residual to the previous phases". Phases are
zero after reset and after a `phase_clear` pulse, which takes 41 clocks.

Output: `act = min(max(phi, cfg_act_min), cfg_act_max)`, 16 bits. That is
(n+1)^2 values per frame, in actuator order, with `act_index` and `act_last`.

## Using the core

Parameters of `sparc_top` (defaults in brackets): `PIX_SIDE` [4], the largest
p; `MAX_NSUB` [50], the largest n; `LANES` [64], coefficients per memory word;
`ADDR_W` [26], memory word address width; `FIFO_DEPTH` [64], matrix FIFO
depth, which is also the depth of the memory read-data crossing;
`PIX_FIFO_DEPTH` [16], the depth of the pixel clock-crossing FIFO. The
12-bit subaperture index limits `MAX_NSUB` to 64.

Bring-up sequence:

1. Hold `rst_n`, `pix_rst_n` and `mem_rst_n` low together while all three
   clocks run, then release them. The reconstructor and integrator clear
   their memories in 41 clocks.
2. Set `cfg_nsub`, `cfg_pside`, gain, leak, `cfg_res_shift` and the
   thresholds. Hold them steady while frames are in flight.
3. If the corrections are used, write the tables: `lut_sel` 0 = LIN
   (address 0..1023), 1 = OFFX, 2 = OFFY (address k = r*n + j).
4. Stream the matrix on `mat_*` in the layout above and wait for
   `matrix_ready`.
5. Stream frames of n*p x n*p pixels on `pix_*`, clocked by `pix_clk`.
   Each frame produces (n+1)^2 values on `act_*`, and `frame_done` pulses with the last one.

All streams are valid/ready. Data moves on a clock edge where both are high.
A stalled actuator output backs up through the integrator and the
reconstructor to the WPU, and then stops the pixel input.

## Sizes and speed

At default parameters the core holds every geometry of the original system's
tests: 11x11, 16x16, 21x21, 32x32, 42x42 and 50x50 subapertures with 2x2 or
4x4 pixels. It also handles the 11x11, 2x2-pixel laboratory set-up with its
144 x 242 zero-padded matrix, slope linearization, gain and leak.

Each frame reads 2n^2*S matrix words. The table shows one frame of every
geometry run on the same build, from the first pixel in to the last actuator
out. The pixel clock runs at 1.25 times the core clock and the memory clock
at 1.67 times. The memory model refuses about 10% of commands and answers
after 4 to 30 memory clocks. The actuator output is stalled 15% of the
time. The times assume a 200 MHz core clock. The clock is this implementation's assumption; the
original system's clock rates are not given.

| n x n | S | matrix words | clocks, p = 2 | clocks, p = 4 | time, p = 4 |
|---|---|---|---|---|---|
| 11x11 | 3 | 726 | 1,701 | 2,260 | 11.3 us |
| 16x16 | 5 | 2,560 | 4,280 | 4,698 | 23.5 us |
| 21x21 | 8 | 7,056 | 9,846 | 10,054 | 50.3 us |
| 32x32 | 18 | 36,864 | 43,975 | 44,363 | 222 us |
| 42x42 | 29 | 102,312 | 116,881 | 117,417 | 587 us |
| 50x50 | 41 | 205,000 | 230,045 | 230,638 | 1.15 ms |

From 32x32 up the frame time is the matrix word count plus roughly 12-20%.
That is the cost of the memory's refusals and latency, and of the slope
pipeline filling at every row. Below that, the pixel input (n^2 p^2
clocks) and the fixed pipeline tail matter more. The original
board reported a median of 1.283 ms at 50x50, 1 ms of it matrix retrieval,
and 39.4 us at 11x11. Its 11x11 figure includes pixel transfer at rates
this model does not try to reproduce.

Zero padding costs bandwidth when (n+1)^2 is just above a multiple of 64.
For example, 144 actuators need 3 words, i.e. 192 lanes.

## Where this implementation departs from the described design, or fills gaps

The published description gives the architecture, the state-machine flow,
CoG slopes, the row-wise sub-matrix decomposition, 16-bit pixels and
coefficients, slope linearization/offset tables, and the gain/leak
integrator. Its memory interface and BRAM addressing details are in a
companion paper and are not reproduced. The following are choices made here:

* **Clocks.** The original acquires pixels on a different clock from slope
  computation, and it talks to memories of different frequencies. This
  core does the same. `pix_*` belong to `pix_clk` and `mem_*` to
  `mem_clk`. Gray-pointer dual-clock FIFOs (`async_fifo`) carry data
  between these clocks and the core clock. How the crossings are built is
  this implementation's choice. The original gives each of its three state
  machines its own clock. Here the reconstructor and the memory state
  machine's control logic share the core clock with slope computation.
* **Matrix layout, lane mapping, memory port, FIFO depths** are this
  implementation's own.
* **The "slopes remaining?" loop** of the reconstructor state machine is
  read as "the Y part of this row is still to do".
* **Slope rate.** The original lets the user trade logic for slope speed.
  Here `cog_slope` always handles one subaperture per clock. That is already
  faster than the one-pixel-per-clock input, since a subaperture has at
  least 4 pixels.
* **Lookup tables** are written through a port at run time. In the original
  they are fixed when the FPGA is programmed.
* **Thresholds** are applied inside the core, as the original's block diagram
  draws them. Its text places the DM safety thresholds in host software.
  With full-range thresholds the stage only saturates to 16 bits.
* **11x11 laboratory timing.** The original text gives the in-FPGA time of
  the 11x11 laboratory bench as "less than 40 ns per frame", but its abstract
  gives a 39.4 us median for 11x11. Forty nanoseconds is a few clocks, too
  short to read even the 144 x 242 matrix, so 40 us is taken as intended.
* **Matrix size.** The summary of the original quotes a 2601 x 2500 matrix
  for 50x50. The core follows the (n+1)^2 x 2n^2 formula of its architecture
  section, i.e. 2601 x 5000 (x and y slopes).
* **Not included:** DRAM controller and PHY, PCIe, host software (binning,
  dark subtraction, dropping the four corner actuators, DM pin mapping).
  The testbenches model the memory with `tb/ddr_model.sv`.

## Verification

Every block has a self-checking testbench in `tb/`. It compares against
reference arithmetic written separately in `tb/tb_ref_pkg.sv`, and ends by
printing `TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_async_fifo` | no loss, duplication or reordering across four clock ratios; full after 16 writes; a word appears within 5 read clocks |
| `tb_sync_fifo` | order, count, full/empty under random traffic |
| `tb_pixel_acq` | bank mapping for p = 4 and 2, zeroed unused banks, input stall with both buffers full |
| `tb_cog_slope` | slopes vs. reference, dark and single-pixel spots, 18-clock latency |
| `tb_slope_lin_offset` | all four enable combinations, saturation |
| `tb_wpu` | whole frames, n = 12/p = 4 and n = 11/p = 2 with corrections; back-pressure reaches the pixel input |
| `tb_mem_sm` | matrix load and ready flag; every sub-matrix block under random memory latency; FIFO fills without overflow |
| `tb_ao_reconstructor` | request order, MVM result, clearing between frames, one word per clock |
| `tb_phase_integrator` | integrator law with several gains/leaks, saturation, phase clear |
| `tb_act_cond` | clamping, order, index and last flag for partial last words |
| `tb_sparc_top` | end to end at default parameters: 3 frames of the 11x11 laboratory set-up, then a matrix reload for n = 8, p = 4 and 2 frames. Counts pixel stalls, MAC waiting for memory, memory busy, actuator stalls, clamps, mode switch, reload and phase clear |
| `tb_sparc_hil` | the hardware-in-the-loop sweep: one frame at each of 11, 16, 21, 32, 42 and 50 subapertures square, at p = 2 and p = 4, with the matrix reloaded per size. Checks every actuator, the matrix words read and bounds on the frame time, and prints the timing table above |
| `tb_sparc_full` | the largest geometry at default parameters: 50x50, 4x4 pixels, 2 frames, all 2601 actuators checked, 205,000 matrix words read per frame |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/sparc_pkg.sv tb/tb_ref_pkg.sv tb/tb_sparc_top.sv --top-module tb_sparc_top
./obj_dir/Vtb_sparc_top
```

Replace the testbench name to run any other. `-Wno-fatal` is needed only
because the testbenches mix 32- and 64-bit integer arithmetic, which Verilator
reports as width warnings. `tb_sparc_full` needs about 90 MB of memory and
runs in about 6 seconds.

Assertions in the RTL check the handshake rules: no push into a full FIFO,
no read data the memory was not asked for, no overflow of the memory
read-data crossing, reads of a pixel row only while it is held, and
matching divider pipelines.
