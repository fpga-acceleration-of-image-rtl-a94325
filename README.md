# Table-driven delay-and-sum reconstruction for photoacoustic tomography

In photoacoustic tomography a laser pulse makes tissue emit ultrasound. An
array of transducer elements records it, and an image is formed by
delay-and-sum (DAS). For every pixel (x, y), each element i contributes the
sample it recorded at the time sound takes to travel from the pixel to the
element:

    S_DAS(x, y) = sum_i  s_i[ tau(x, y, i) ],     tau = distance(x, y, i) / c * fs

The array geometry, the speed of sound c and the sampling rate fs do not
change from frame to frame, so tau(x, y, i) can be worked out once and kept
in a table. Reconstruction then needs no arithmetic on delays at all. For
each pixel the hardware reads a table entry, uses it as an address into the
channel's sample memory, and adds up what it finds. This RTL builds that
idea as the FPGA architecture of Gao et al., "FPGA Acceleration of Image
Reconstruction for Real-Time Photoacoustic Tomography". It covers the plain
DAS algorithm and two variants built on the same look-ups: DAS with a
coherence factor (DAS-CF) and delay-multiply-and-sum (DMAS). Eight channels
run in parallel. A 128-element array is reconstructed in 16 *imaging
cycles* of eight channels each.

The default build is the evaluated configuration: 8 lanes, a 256 x 256
image, 128 channels (16 table sets), a 200 MHz clock. It reconstructs one
frame in 1,146,923 clocks (5.73 ms). The original system reports 5.33 ms
for the same size.

## The delay table

Each lane has its own table memory. Entry `set*NPIX + p` holds a sample
number, the delay of pixel p for the element that the lane serves in imaging
cycle `set`. Pixels are numbered row by row, p = y*W + x. Lane l in imaging
cycle c serves element 8c + l. The table is computed offline. For the ring
array used in the tests (elements evenly spaced on a 30 mm radius, a
20 mm x 20 mm region in the middle, 40 MSPS, 1500 m/s):

    element e at (30 mm * cos(2*pi*e/N), 30 mm * sin(2*pi*e/N))
    pixel (x, y) at ((x - (W-1)/2) * 20 mm / W, (y - (W-1)/2) * 20 mm / W)
    table = round(distance / 1500 m/s * 40e6 /s)

The farthest pixel is 44.1 mm from an element, i.e. 1177 samples. Sample
memories therefore hold k = 2048 samples (11-bit table entries). The table
memory behaves as a ROM while images are made. It is filled once through the
`tbl_*` port while the design is idle, and all lanes can be written in the
same clock.

## One channel: the DAS module

`das_module` holds three memories, each with one write port and one
registered read port:

| memory | module | size (default) | contents |
|---|---|---|---|
| RAM1 | `sensor_ram` | 2048 x 16 bit | the channel's samples of the current imaging cycle |
| ROM | `table_rom` | 16 x 65536 x 11 bit | the delay tables of the 16 elements the lane serves |
| RAM2 | `image_ram` | 65536 x 16 bit | the channel's image: one sample per pixel |

A mapping pass takes one pixel per clock through a three-stage pipeline:

    clock t    : ROM address = set*NPIX + p
    clock t+1  : ROM data (tau) is the RAM1 address
    clock t+2  : RAM1 data is written to RAM2[p]

RAM2 is read-first. A read of pixel p in clock t returns the value from the
*previous* mapping pass, two clocks before the new value lands. The
controller uses this to stream one imaging cycle out of RAM2 while it maps
the next. This saves a full pass over the image per imaging cycle without a
second image buffer.

## The frame schedule

`das_controller` latches the mode, the number of imaging cycles
(`cfg_cycles`, up to the number of table sets) and the image size
(`cfg_npix`, 4 up to NPIX) at `start`. It then runs:

    LOAD(0) MAP(0) | LOAD(1) MAP(1)+OUT(0) | ... | LOAD(C-1) MAP(C-1)+OUT(C-2) | OUT(C-1) | drain

* LOAD accepts k beats on the sensor port (valid/ready). Each beat carries
  one sample per lane and goes to RAM1 at addresses 0..k-1. A clock without
  `s_valid` stalls the frame.
* MAP runs the table pass above. From the second imaging cycle on, the same
  pass reads the previous cycle out of RAM2, and `map_pix` doubles as the
  read address.
* OUT(C-1) reads the last imaging cycle out alone.

A stall-free frame takes `C*(k + npix) + npix` issue clocks. Add 43 clocks
of datapath latency (RAM2 1, combiner 18, accumulator 2, post-processor 22)
to reach the last output pixel. Pixels leave in order, one per clock, during
the final read-out only. `pix_last` marks the last one and `done` pulses one
clock later.

Frame times at 200 MHz (clocks from this formula, all checked in
simulation) against the FPGA times the original system reports for DAS:

| workload | this design | reported | fits the default build |
|---|---|---|---|
| 64 x 64, 128 channels | 0.512 ms | 0.418 ms | yes (cfg_npix = 4096) |
| 128 x 128, 128 channels | 1.557 ms | 1.394 ms | yes |
| 256 x 256, 128 channels | 5.735 ms | 5.327 ms | yes |
| 512 x 512, 128 channels | 22.45 ms | 21.0 ms | no: needs NPIX = 262144 |
| 256 x 256, 256 channels | 11.14 ms | 10.65 ms | no: needs SETS = 32 |
| 256 x 256, 512 channels | 21.96 ms | 21.31 ms | no: needs SETS = 64 |

The times are the same in all three modes: the extra arithmetic of DAS-CF
and DMAS is pipelined and adds latency but no clocks per pixel. The
remaining gap is close to one LOAD per imaging cycle. It would shrink with a
shorter record k or with loading overlapped with mapping; the original
system's record length and schedule are not known.

## Combining channels: DAS, DAS-CF and DMAS

All three algorithms reduce, per pixel, to two running sums A and B over all
channels, followed by one final operation. With s the sample a channel
contributes to the pixel:

| mode (`mode_e`) | A | B | output |
|---|---|---|---|
| `MODE_DAS` | sum s | 0 | A |
| `MODE_DAS_CF` | sum s | sum s^2 | A^2 / B |
| `MODE_DMAS` | sum r, r = sign(s)*sqrt(abs(s)) | sum abs(s) | (A^2 - B) / 2 |

DMAS is the sum of r_i * r_j over all channel pairs i < j. Because
(sum r)^2 = sum r^2 + 2 * sum_{i<j} r_i r_j and r^2 = abs(s), that sum equals
(A^2 - B)/2. So the quadratic number of products becomes one square and one
subtraction per pixel. DAS-CF as built here outputs the coherence ratio
(sum s)^2 / sum s^2, which lies between 0 and the number of channels. The
usual coherence-factor image also multiplies this by the DAS value and
divides by N. The original architecture, as drawn, stops at the divider, and
so does this one.

The work is split across three blocks:

* `channel_combiner`, once per imaging cycle, forms the eight-lane partial
  sums. Each lane has a `signed_sqrt` and a `squarer`. Two `adder_tree`s
  (SUM) add the A and B terms. Every mode has the same 18-clock latency:
  absolute value 1, root 16, sum 1. The DAS and DAS-CF terms are delayed to
  match, so the pixel stream never reorders.
* `frame_accumulator` keeps two frame buffers (A: 32-bit signed, B: 48-bit
  unsigned, one word per pixel). It adds each imaging cycle in by
  read-modify-write, one pixel per clock. The first imaging cycle overwrites
  instead of adding. The last one sends the totals on instead of storing
  them.
* `post_processor` applies the final operation to the totals over all
  channels. This matters for DAS-CF and DMAS: squaring per imaging cycle
  would be wrong. It squares A in one clock (the DSP-block latency), runs
  the 20-clock `divider` for DAS-CF, and subtracts and shifts right by one
  for DMAS. DAS and DMAS results wait for the divider, so all modes take 22
  clocks.

### Number formats

| quantity | format |
|---|---|
| sample s | 16-bit two's complement |
| r = sign(s)*sqrt(abs(s)) | signed, 8 fraction bits: r = sign(s)*floor(sqrt(abs(s) * 2^16)) |
| DMAS B term | abs(s) * 2^16, the same scale as r^2 |
| A, B totals | 32-bit signed, 48-bit unsigned (no overflow up to 512 channels) |
| DAS output | A, sign-extended to 64 bits |
| DAS-CF output | floor(A^2 * 2^10 / B): 20 bits, 10 of them fraction; saturates at 2^20-1; 0 when B = 0 |
| DMAS output | (A^2 - B) >>> 1, 64-bit signed, in units of 2^-16 |

DMAS uses the rounded root in A but the exact abs(s) in B. Per channel,
r^2 and abs(s)*2^16 differ by less than 2r+1. The result therefore differs
from a sum of rounded-root products by less than (2r+1)/2 units of 2^-16 per
channel, a relative error of about 2^-8 of that channel's term.

### Arithmetic units

* `cordic_sqrt`: floor(sqrt) of a 32-bit number, one root bit per pipeline
  stage (digit-by-digit), so 16 stages and 16 clocks. It accepts a new input
  every clock. It stands in for the vendor CORDIC core of the original,
  which has the same latency.
* `signed_sqrt`: takes the sign from the top bit and negates negative
  samples. It shifts left by 16, takes the root, and re-applies the sign.
  17 clocks.
* `divider`: restoring division, one quotient bit per stage, 20 stages and
  20 clocks, the latency of the original's divider core.
* `squarer`: a registered multiply, one clock.

## Interface of `pat_recon_top`

| port | dir | width | use |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `tbl_we` | in | LANES | table write, per lane; only while `busy` is low |
| `tbl_addr` | in | log2(SETS*NPIX) | set*NPIX + pixel |
| `tbl_data` | in | LANES x 11 | one table value per lane |
| `start` | in | 1 | start a frame (while idle) |
| `cfg_mode` | in | `mode_e` | 0 DAS, 1 DAS-CF, 2 DMAS |
| `cfg_cycles` | in | log2(SETS+1) | imaging cycles = channels / LANES |
| `cfg_npix` | in | log2(NPIX+1) | pixels in the image, 4..NPIX |
| `s_valid`, `s_ready` | in/out | 1 | sensor beat handshake |
| `s_data` | in | LANES x 16 | one signed sample per lane |
| `pix_valid`, `pix_index`, `pix_data` | out | 1, log2(NPIX), 64 | output pixels in order, no back-pressure |
| `pix_last`, `done`, `busy` | out | 1 | last pixel; frame done pulse; frame in progress |

To use it:

1. Write all table sets.
2. Pulse `start` with the configuration.
3. For each imaging cycle c, send k beats, where lane l carries element
   8c + l.
4. Collect cfg_npix pixels.

The receiver must always accept output pixels. Assertions flag a table write
while busy, a table write during mapping, and an out-of-range configuration.

Parameters: `LANES` (8), `K` (2048), `NPIX` (65536), `SETS` (16). Widths
shared by all modules are in `pat_pkg`.

## How this departs from the original, and what is assumed

Taken from the original:

* the table look-up method;
* the RAM1 / ROM / RAM2 structure of a DAS module and its workflow;
* eight parallel channels and N/8 imaging cycles;
* the three algorithm datapaths (sums, squares, signed roots, divider,
  subtraction, halving by a shift);
* the 1-clock square, 16-clock root and 20-clock division;
* the 256 x 256 image, 128 channels and 200 MHz clock.

This design's own choices, where the original says nothing:

* The sample width (16-bit two's complement) and the record length
  k = 2048. Absolute value is a negation; the original's "flip the sign bit"
  would only suit sign-magnitude data.
* Keeping all 16 tables of a lane resident, with a write port to fill them.
* The valid/ready sensor port and the unthrottled output stream.
* One datapath for all three modes, selected per frame.
* The frame accumulator that joins imaging cycles, and doing the final
  square and division on the totals.
* Reading out one imaging cycle during the next one's mapping.
* The fixed-point formats, DAS-CF saturation and the divide-by-zero rule.
* The digit-by-digit root and the restoring divider in place of vendor
  cores.

Known differences:

* The original figure draws four DAS modules; the text and this design use
  eight.
* The figure wires the DMAS correction sum straight from the DAS module
  outputs. Here it sums abs(s), which is what the algebra needs.
* The DAS-CF output is the bare coherence ratio, as drawn.
* The default build holds about 106 Mbit of memory: 92 Mbit of tables, 5.2
  Mbit of frame buffers and 8.4 Mbit of RAM2. That is far more than the
  4.9 Mbit of block RAM of the FPGA the original ran on. Where the original
  keeps its tables is not known. A real build for that part would hold fewer
  tables or stream them from external memory.
* The pre-amplifiers and ADC in front, and the link to the PC behind, are
  outside this RTL.

## Verification

Every module has a self-checking testbench (`tb/tb_<module>.sv`). Each one
compares against values computed independently in the testbench, using the
integer models in `tb/pat_ref_pkg.sv`, and checks the stated latency to the
clock:

* The arithmetic units stream a new operand every clock, including extremes,
  perfect squares, saturation and divide-by-zero.
* The memories check read-back and read-during-write.
* `tb_das_module` checks the mapping pass, map gaps, and read-out during
  mapping.
* `tb_das_controller` checks phase order, addresses, flags, stalls and the
  frame length formula.
* `tb_pat_recon_top` (k = 64, 64 pixels, 4 sets) runs eight frames across
  all modes. The frames use 1 to 4 imaging cycles, reduced image sizes,
  random stalls and all-zero data. Every pixel is checked, and the test
  counts each mechanism (each mode, stalls, single and multi-cycle frames,
  reduced size, zero divisor, negative output).
* `tb_pat_recon_full` runs the default build on a 128-element ring phantom
  with three point absorbers, one frame per mode. It checks all 65536
  pixels, the frame length, and that the brightest DAS pixel lies on an
  absorber. It runs in about a minute.
* `tb_workload_image_size` (64, 128 and 512 pixels square) and
  `tb_workload_channels` (256 and 512 channels) run the other evaluated
  sizes on the same phantom, using the helper `tb/recon_run.sv`. They take
  one to two minutes each.

Simulating with Verilator 5, from the folder that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
        rtl/pat_pkg.sv tb/pat_ref_pkg.sv tb/tb_pat_recon_top.sv --top-module tb_pat_recon_top
    ./obj_dir/Vtb_pat_recon_top

Each testbench ends with a line `TB_RESULT checks=N failures=M`. Any
testbench can be swapped in for `tb_pat_recon_top` above. Lint:
`verilator --lint-only -Wall -Irtl -y rtl rtl/pat_pkg.sv rtl/pat_recon_top.sv`.
The only warnings are package constants a given file does not use and
`rst_n`, which is used both as an asynchronous reset and as an assertion's
disable condition.
