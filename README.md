# A scalable Shack-Hartmann slope computer for adaptive-optics control

An adaptive-optics loop measures the distorted wavefront of a star with a
Shack-Hartmann wavefront sensor (WFS). A lenslet array cuts the pupil into
*subapertures*. Each lenslet images the star onto its own small patch of
P x P pixels. The spot's displacement from the patch centre gives the local
wavefront slope in x and in y. Every control cycle these slopes must be
pulled out of a large CCD frame before the reconstructor can turn them into
deformable-mirror commands.

This RTL is the wavefront processing unit (WPU). It takes the raw pixel
streams of a four-quadrant 512 x 512 CCD, one 16-bit pixel per pixel clock
per quadrant. It emits the centre-of-gravity slope of every subaperture as
signed fixed point with 8 fractional bits. Its main idea is to decouple the
two rates involved:

* **Pixel acquisition** runs at the pixel clock, 131.072 MHz. At that rate a
  256 x 256 quadrant arrives in 0.5 ms.
* **Slope computation** runs on a clock 16 times slower (8.192 MHz), so the
  division in the centre-of-gravity formula has a whole slow cycle to settle.
  It makes up the rate by computing `ITER` subapertures in parallel.

A set of dual-port block RAMs sits between the two. Port A writes it in the
pixel domain and port B reads it in the slope domain. The pixels are laid out
so that all pixels of `ITER` subapertures can be read in **one** access. The
design scales with three numbers: subapertures per row `N`, pixels per
subaperture side `P`, and slopes per slow cycle `ITER`.

## Sizes

| Parameter | Default | Meaning |
|---|---|---|
| `NUM_CH` | 4 | CCD quadrants, each with its own channel |
| `N` | 64 | subapertures per row of a quadrant (256 / 4) |
| `P` | 4 | pixels per subaperture side |
| `ITER` | 16 | subapertures (x and y slope each) computed per slow cycle |
| `ROWS` | 64 | subaperture rows per quadrant frame |
| `PIX_W` | 16 | bits per pixel |
| `FRAC_BITS`, `SLOPE_W` | 8, 16 | slope format: signed Q7.8, in pixels |
| `CLK_RATIO` | 16 | pixel clock / slope clock (clocks are supplied from outside) |

Several quantities follow from these. `G = N/ITER` is the number of groups in
a subaperture row (4). `NBANK = ITER*P*P` is the number of memory banks per
channel (256). `DEPTH = 2*G` is the number of words per bank (8), which holds
two subaperture rows. The default size matches the four-channel configuration
of the source design: 256 BRAM18 per channel and 512 BRAM36 in all. A
synthesised default top has 131,072 memory bits, which is 4 x 256 x 8 x 16.

## Where a pixel goes: the buffer layout

This is the part that makes the design work, and the least obvious one.

Number the subapertures of a row by column `sc`, and the pixels inside a
subaperture by `(pr, pc)`. A pixel at frame position `(r, c)` is written to:

```
sr   = r / P            pr = r mod P
sc   = c / P            pc = c mod P
lane = sc mod ITER      group = sc / ITER
bank = lane*P*P + pr*P + pc          (one-hot chip select)
addr = (sr mod 2)*G + group          (port A address)
```

Every pixel position of every one of `ITER` neighbouring subapertures
therefore has its own bank. All those pixels share the same address. One
port-B read at address `a` returns, across all banks, the complete pixel sets
of subapertures `ITER*(a mod G)` to `ITER*(a mod G)+ITER-1`.

Example with `N = 4`, `P = 4`, `ITER = 2` (32 banks, 4 words). Addresses are
counted from 1 here:

| | subap 1 | subap 2 | subap 3 | subap 4 |
|---|---|---|---|---|
| subaperture row 1 | banks 1-16, addr 1 | banks 17-32, addr 1 | banks 1-16, addr 2 | banks 17-32, addr 2 |
| subaperture row 2 | banks 1-16, addr 3 | banks 17-32, addr 3 | banks 1-16, addr 4 | banks 17-32, addr 4 |

Within a subaperture, bank numbers run row-major: its top pixel row uses banks
1-4 and its bottom row uses banks 13-16. The address alternates between two
halves, one per subaperture row. Row `k+1` is written into one half while row
`k` is read out of the other. This is the double buffering that lets
acquisition and computation run side by side.

The input addressing unit keeps counters rather than dividing. It raises three
flags with the write they belong to:

* `iter_shift`: the last of `ITER*P` pixels of a pixel line within one group
  was written. The address moves on to the next group.
* `row_done`: the last pixel of a subaperture row was written. That row is now
  complete in the buffer.
* `even_row_done`: the same, for every second row. The addressing returns to
  address 0.

A frame must hold an even number of subaperture rows, so the addressing wraps
at the end of the frame. There is no frame-sync input. After reset, the first
pixel is taken to be the frame's top-left pixel.

## Slope computation

`row_done` is a single pixel-clock pulse. It reaches the slope domain through
a toggle synchroniser (`pulse_sync`), two to three slow cycles later. The slope
state machine has two states:

* **`ST_INIT`** waits for a completed row. It then asks the output addressing
  unit for a readout of the right buffer half, which is the row number mod 2.
* **`ST_CENTROID`** runs while the output addressing unit issues the `G` port-B
  addresses of that half, one per slow cycle. For each read:
  1. The buffer returns `ITER*P*P` words one cycle later.
  2. The subaperture array registers them and regroups them as `ITER`
     subapertures.
  3. `ITER` centroid units compute x and y combinationally.
  4. The state machine registers the slopes and raises `slope_valid`.

  After the `G`-th group, `slope_done` pulses and the machine returns to
  `ST_INIT`.

A `row_done` that comes in during `ST_CENTROID` is held and served next. The
buffer's two halves allow at most one row to wait. If a third row arrives,
`row_pending_overrun` is set. The slope clock is far faster than needed, so
this does not happen at the defaults.

`pipe_out` tells the downstream reconstructor how many slopes of the current
frame it has received. A slope here means the x/y pair of one subaperture.
It rises by `ITER` with each group. After the last row
of a frame, the next frame starts it again from `ITER`. Slopes arrive in
subaperture order: row by row, left to right, `ITER` at a time, with lane 0
the leftmost.

### The centre-of-gravity arithmetic

For the P x P pixels `I[r][c]` of a subaperture, `cog_centroid` computes:

```
x = sum I*(2c - (P-1)) / (2 * sum I)
y = sum I*(2r - (P-1)) / (2 * sum I)
```

This is the centroid offset from the subaperture centre in pixels. Doubled
coordinates are used so that the centre `(P-1)/2` becomes a whole number. The
magnitude, shifted left by 8, is divided by a restoring divider (division by
repeated subtraction) of `16+log2(P*P)+log2(P)+1+8` quotient bits. The result
is truncated toward zero and the sign restored. A dark subaperture, with sum
0, gives 0. The magnitude is at most `(P-1)/2` pixels, 3.5 for `P = 8`, so
Q7.8 never overflows.

The divider is one long combinational path. It is meant to settle within one
slow-clock period of about 122 ns. That is why the slope domain is slow: the
source design reports that its state machine closes timing at about 10 MHz.
No reference-slope subtraction, thresholding or pixel weighting is done.
The multiplications are by small constant coordinates and need no hardware
multipliers, so this RTL's DSP and LUT use is not comparable with the
figures reported for the original FPGA build. Its block-RAM count matches
them.

## Timing

At the defaults, with pixels arriving back to back:

* A row of subapertures arrives in `N*P*P = 1024` pixel cycles, which is 64
  slow cycles.
* Its slopes leave in `G = 4` consecutive slow cycles, 16 x and 16 y slopes
  each.
* The first slopes follow `row_done` by at most 8 slow cycles: 2-3 for
  synchronisation, 1 to leave `ST_INIT`, and 3 for the read, regroup and
  register stages.
* The last slope of a 256 x 256 quadrant frame comes out about 1.3 us after
  the frame's last pixel. In simulation that is 501.3 us after the first
  pixel, against a 0.5 ms frame.

The computation keeps up as long as `N/ITER` slow cycles fit within the
`N*P*P` pixel cycles of a row, that is as long as `ITER*P*P >= CLK_RATIO`.

## Module map

| File | Domain | Role |
|---|---|---|
| `rtl/wpu_pkg.sv` | - | default sizes, `pixel_t`, `slope_t`, state enum |
| `rtl/input_addr_cs.sv` | pixel | raster position -> bank chip select, port A address, row flags |
| `rtl/bram_bank.sv` | both | one simple dual-port, dual-clock RAM bank |
| `rtl/pixel_buffer.sv` | both | `NBANK` banks; wide port-B read with `rd_valid` |
| `rtl/pulse_sync.sv` | both | toggle synchroniser for `row_done` |
| `rtl/output_addr_unit.sv` | slope | port-B address sequence for one row |
| `rtl/subap_array.sv` | slope | pipeline register that regroups bank words into subapertures |
| `rtl/restoring_divider.sv` | - | combinational shift-and-subtract divider |
| `rtl/cog_centroid.sv` | - | centre-of-gravity x and y of one subaperture |
| `rtl/slope_fsm.sv` | slope | Initialize / Centroid Computation control, output registers, `pipe_out` |
| `rtl/wpu_channel.sv` | both | one quadrant: all of the above wired together |
| `rtl/wpu_top.sv` | both | `NUM_CH` channels on shared clocks |

Each domain has its own synchronous, active-high reset (`rst_pix`,
`rst_slow`). Hold both across a few slow-clock edges. The top's ports are
unpacked arrays indexed by channel.

## How far it follows the source design

These parts follow the source design:

* The two clock domains with a 1:16 ratio.
* The dual-port BRAM isolation between them, with the bank and address layout
  described above.
* The unit names and the flags `iter_shift`, `row_done` and `even_row_done`.
* The two-state slope machine started by `row_done`.
* `ITER` slopes per slow cycle.
* The `pipe_out` count.
* A centre of gravity computed by repeated subtraction, with 8 fractional
  bits.
* The four-channel n = 64, p = 4, iter = 16 configuration.

These are choices of this implementation:

* **Memory banks.** Each bank is an inferred array only `2*N/ITER` words deep
  and 16 bits wide, with a one-cycle registered read. The original maps each
  bank to a 1K-word BRAM18 primitive.
* **Input addressing.** Its outputs are registered. The chip select is a
  one-hot vector.
* **Frame start.** The first pixel after reset is taken as the frame start.
  The frame must hold an even number of subaperture rows.
* **`row_done` on every row.** The flag is raised at the end of every
  subaperture row, not only odd ones, because the state machine needs a start
  for each row.
* **Clock crossing.** `row_done` crosses domains through a toggle
  synchroniser.
* **Readout handshake.** The start/busy handshake is this design's own. So are
  the one-deep hold of a pending row and the overrun flag.
* **Subaperture array.** Its contents, a tagged pipeline register, are this
  design's own.
* **Slope definition.** The slope is the offset from the subaperture centre,
  truncated toward zero, 0 for a dark subaperture, in a 16-bit Q7.8 word.
* **`pipe_out`.** It counts per frame.
* **Clocks.** Both clocks come from outside. On an FPGA the slope clock would
  come from a clock manager.

These are not included:

* The sensor and its fibre links.
* Any I/O protocol.
* Dark, flat and background correction of the raw frame. These are named as
  requirements only.
* The AO reconstructor, a matrix-vector multiply with a matrix of up to
  131,072 x 16,641 entries held in off-chip DDR3. The slope outputs are the
  place it would connect.

## Configurations

The parameters cover every configuration in the source design's resource
tables. The top as shipped is the four-quadrant 512 x 512 case: four channels
of 256 x 256 pixels, 64 x 64 subapertures of 4 x 4 pixels each, and 4,096
x/y slope pairs per quadrant-frame. Other cases need a change of parameters:

* A single 128 x 128 channel with 4 x 4 subapertures: `NUM_CH = 1`, `N = 32`,
  `P = 4`, `ITER` = 4, 8 or 16.
* 8 x 8-pixel subapertures: `P = 8`.
* Other rates: `ITER` = 8 or 32.

All four pairings of N = 32/64 and P = 4/8 are simulated in
`tb_wpu_configs`. `N` must be a multiple of `ITER`. `ITER*P*P` must be at least 16 for the slow
domain to keep up.

## Simulating

Every testbench in `tb/` checks itself. It prints
`TB_RESULT checks=<n> failures=<m>`, and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/wpu_pkg.sv \
          tb/tb_wpu_top.sv --top-module tb_wpu_top -o sim
./obj_dir/sim
```

Use the same command with another testbench name for the others.

| Testbench | Size | What it shows |
|---|---|---|
| `tb_input_addr_cs` | N=8, P=4, ITER=2 | bank, address and flags for every pixel of two frames, with random gaps, against the division formulas |
| `tb_pixel_buffer` | N=8, P=2, ITER=2 | write every word on the fast clock, read it back on the slow one |
| `tb_output_addr_unit` | N=16, ITER=4 | address sequence for both halves; a start during a readout is ignored |
| `tb_subap_array` | P=4, ITER=2 | regrouping, valid/last timing, hold |
| `tb_cog_centroid` | P=4 and 8 | hand-worked spots, flat and dark patches, 2,000 random patches against a floating-point centroid (within 1 LSB, never rounded away from zero) |
| `tb_slope_fsm` | N=8, ITER=2, ROWS=4 | state sequence, `rd_half`, `pipe_out` per frame, a held request, an overrun |
| `tb_wpu_channel` | N=8, P=4, ITER=2, 32 x 32 | three frames end to end with exact integer reference slopes; row rate, latency, overlap of computation and acquisition |
| `tb_wpu_configs` | four channel sizes | one channel each at N=32/P=4/ITER=4, N=32/P=8/ITER=8, N=64/P=4/ITER=32 and N=64/P=8/ITER=8, one full frame each, every slope checked, frame finished within 20 slope cycles of its last pixel (helper: `wpu_frame_check`) |
| `tb_wpu_top` | defaults | two frames on all four quadrants at 131.072 MHz; every slope, `pipe_out`, the 0.5 ms frame budget, and a count of each mechanism |

`tb_wpu_top` compiles in about two minutes and runs in about a second. The
channels receive pixels as unpacked arrays `pix_en[ch]` and `pix_in[ch]`.
