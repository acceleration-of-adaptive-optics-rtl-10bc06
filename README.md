# Streaming centroid accelerator for Shack-Hartmann wavefront-sensor simulation

Simulating an adaptive-optics system spends much of its time on the
wavefront sensor. A Shack-Hartmann sensor cuts the telescope pupil into a
grid of sub-apertures, and each sub-aperture forms a small spot image on a
detector. The local wavefront slope is the centroid of that spot: the
intensity-weighted mean pixel position. This RTL moves the centroid step
off the host CPU and onto an FPGA that sits on the host's memory
interconnect. The FPGA fetches the simulated detector pixels from host
memory by itself, computes both centroids of every sub-aperture, and writes
them back as single-precision floats. The CPU only programs a few
registers and says "start".

The design uses no on-chip frame buffer and no per-sub-aperture control.
Pixels stream through a fixed pipeline at the full width of the host bus,
which is eight bytes (four 16-bit pixels) per clock. The pipeline keeps a
running sum until the last pixel of a sub-aperture has passed, and then it
emits one result. The throughput is therefore set by the memory bandwidth,
not by the arithmetic. It is the same for 4x4 and 32x32 sub-apertures.

The design follows the published description of a centroid accelerator for
an FPGA-equipped Cray XD1 node. That description gives the algorithm, the
data formats, the user controls and the bus rate. It does not give the
internal structure, so the micro-architecture, bus protocol, register map
and numeric details here are this implementation's own. The section
"Departures and open points" lists them.

## What is computed

For a sub-aperture of `Nx x Ny` pixels `p(x,y)` (16-bit unsigned), with
`x = 0..Nx-1` and `y = 0..Ny-1`:

```
w(x,y) = p            (weighting 0, none)
       = floor(p^1.5) (weighting 1)
       = p^2          (weighting 2)

cx = float(sum(x*w) / sum(w)) - (Nx-1)/2
cy = float(sum(y*w) / sum(w)) - (Ny-1)/2
```

So 0 is the centre of the sub-aperture, and results lie in
`[-(N-1)/2, +(N-1)/2]`. Each result is an IEEE-754 single. The pair is
written as one 64-bit word: `cx` goes in bits 31:0 (the lower address) and
`cy` in bits 63:32. If all pixels are 0 (`sum(w) = 0`), both results are
the quiet NaN `0x7FC00000`, which is what `0.0f/0.0f` gives in C.

Exact arithmetic, in the order the hardware uses:

1. **Weights** are integers of up to 32 bits. `p^2 < 2^32`. The power 1.5 is
   computed as `floor(sqrt(p^3))`, which is exact.
2. **Sums** are exact integers. `sum(w)` has 42 bits, and `sum(x*w)` and
   `sum(y*w)` have 47 bits each. This holds for up to 32x32 pixels of
   weight up to `2^32`.
3. **Division** gives the fixed-point mean `q = floor(sum(x*w) * 2^32 / sum(w))`.
   It has 5 integer and 32 fraction bits, plus a sticky bit that says
   whether the remainder was non-zero.
4. **Conversion** of `q` to single precision is round-to-nearest,
   ties-to-even. The sticky bit counts as "something below the last
   fixed-point bit".
   - A value of `2^-8` or more (25 or more significant fixed-point bits)
     is rounded exactly as the true rational would be.
   - A smaller value, which means a spot at the very first pixel, is
     converted from its truncated 32-fraction-bit form. Its absolute error
     stays below `2^-32` pixel.
5. **Offset** `(N-1)/2` is subtracted in single precision. The result is
   the correctly rounded difference (nearest, ties-to-even).
   `ca_fp_offset` gets this without a general float adder. Its input is
   known to lie between `2^-32` and 32, so it places the value exactly in a
   60-bit fixed-point word, subtracts the half-integer there, and rounds
   once.

There are two roundings, one at the conversion and one at the
subtraction, as in a software routine that computes the mean in single
precision and then subtracts the offset.

## Data flow

```
 host memory ──rd req/rsp──► ca_read_dma ──64b──► ca_pixel_weight ──4×32b──► ca_accum
   (pixels)                  (credits, FIFO 32)   (p, p^1.5, p^2; 26 clk)      (x,y tracking,
                                                                                 3 sums; 1 clk)
                                                                                    │ sum_w, sum_xw, sum_yw
                                                                                    ▼
 host memory ◄─wr req── ca_write_dma ◄─{cy,cx}─ 2 × ca_fp_offset ◄─ 2 × ca_fix2float ◄─ 2 × ca_divider
  (centroids)           (FIFO 16)               (−(N−1)/2; 2 clk)   (to float; 2 clk)   (restoring, 38 clk)

 host CPU ──register writes──► ca_regs  (configuration, start/stop, status, count)
```

| module            | role |
|-------------------|------|
| `ca_pkg`          | widths, weighting and register enums, run-configuration struct |
| `centroid_accel`  | top level: wires the blocks, global stall, idle detection |
| `ca_regs`         | register file and the IDLE/START/RUN run controller |
| `ca_read_dma`     | bus-master reader, one 8-byte request per clock, credit-limited |
| `ca_fifo`         | show-ahead synchronous FIFO used by both DMA engines |
| `ca_pixel_weight` | four weighting lanes with a 24-stage integer square root |
| `ca_accum`        | per-lane position tracking and the three running sums |
| `ca_divider`      | pipelined restoring divider, one quotient bit per stage |
| `ca_fix2float`    | fixed point to single precision, rounding, NaN for empty input |
| `ca_fp_offset`    | single-precision subtraction of the centre offset (N-1)/2 |
| `ca_write_dma`    | output FIFO and bus-master writer |

### Four pixels per clock, any sub-aperture size

The hardest part to follow is `ca_accum`. Each word carries four pixels,
and a sub-aperture need not start on a word boundary. For example, a 3x5
sub-aperture holds 15 pixels. The accumulator keeps the `(x, y)` of lane 0
and steps it along the row three times in combinational logic. Each step
wraps to the next row, and past the last row it wraps to the next
sub-aperture. This gives every lane its own position and a "last pixel"
flag.

- The lanes up to and including the flagged one are added to the running
  sums, and the totals are emitted.
- The lanes after the flagged one start the new sums.

The sizes must be at least 2x2, so a sub-aperture has at least 4 pixels and
at most one can end per word. That allows one result per clock, which the
2x2 case needs.

Pixels are stored one sub-aperture after another. Each sub-aperture is in
row-major order, with x varying fastest. Pixel 0 is in bits 15:0 of the
word at the lowest address (little-endian). If the buffer ends in the
middle of a sub-aperture, that partial sub-aperture is dropped.

## Flow control and timing

- **Global advance.** Each pipeline stage moves only while the output FIFO
  has space (`adv = !wr_full`). Data that is missing does not stall
  anything. A bubble simply travels down the pipeline with `valid` low.
  Every stage boundary samples its input only when `adv` is high, so a
  result that waits through a stall is still taken exactly once.
- **Read credits.** Read responses cannot be refused. The reader therefore
  issues a request only while `outstanding + FIFO occupancy < 32`. A host
  with up to about 30 clocks of latency still delivers one word per clock.
- **Throughput.** One 64-bit word per clock in, which is 800 MB/s at
  100 MHz, or 1.25 ns per byte. Out, one 64-bit word per sub-aperture.
- **Latency.** About 69 clocks from the last word of a sub-aperture to its
  result entering the output FIFO:
  - 26 clocks for weighting;
  - 1 clock for accumulation;
  - 38 clocks for division;
  - 2 clocks for conversion;
  - 2 clocks for the offset.

  Host latency and the write come on top of that.
- **Run control.** Writing 1 to `CTRL` freezes the configuration and
  starts a run. The run ends (`STATUS.done`) once the reader has finished
  and every engine is empty. Writing 2 to `CTRL` stops a run: no new reads
  are issued, but words already requested are still processed. `COUNT`
  holds the number of centroid pairs written.

### Register map (64-bit registers, index on `reg_addr`)

| idx | name     | meaning |
|-----|----------|---------|
| 0   | RD_ADDR  | byte address of the pixel buffer (8-byte aligned) |
| 1   | RD_BYTES | buffer length in bytes, a multiple of 8 |
| 2   | WR_ADDR  | byte address of the first centroid pair |
| 3   | NX       | pixels per row, 2..32 |
| 4   | NY       | rows, 2..32 |
| 5   | WEIGHT   | 0 none, 1 power 1.5, 2 power 2 |
| 6   | CTRL     | write 1: start, write 2: stop |
| 7   | STATUS   | bit 0 busy, bit 1 done |
| 8   | COUNT    | centroid pairs written in this run |

Writes to registers 0-5 are ignored while a run is busy. Reads are
combinational.

### Host bus

The original hardware uses a closed vendor interconnect core. Here it is
replaced by a generic interface:

- A read request channel (`rd_req_valid/ready/addr`).
- An in-order read response channel (`rd_rsp_valid/data`) with no
  back-pressure.
- A write channel (`wr_valid/ready/addr/data`).

Addresses are 40-bit byte addresses. On a valid/ready channel, the address
and data must not change while `valid` is high and `ready` is low.
Assertions in the DMA engines check this.

## Departures and open points

- **Exactness.** The source says its hardware agrees exactly with its
  software routine. That routine is not given. The two roundings here
  (nearest-even after division, then after the offset) are a reasonable
  guess at it, not a known match.
- **Pipeline latency.** The source reports 2-3 µs from the last input word
  to the last output, which is several hundred clocks. This pipeline takes
  about 69 clocks. The source used a vendor division library whose depth
  is unknown.
- **Pixel weighting.** Only the two weightings the source names (powers 1.5
  and 2) are offered, plus no weighting. How the source computed `p^1.5` is
  not known.
- **Not in this RTL.** The source proposes further stages ahead of the
  centroid stage: a 2-D FFT of the pupil field, a power spectrum, sky
  background, photon and read-out noise, and noise subtraction. These are
  not part of this RTL. Neither are the node's CPUs, memory, switching
  fabric, local SRAM or inter-FPGA links.
- **Own choices.** The sizes 2..32, the 40-bit addresses, the FIFO depths,
  the register map and the NaN for empty sub-apertures are choices of this
  design.

## Verification

Every module except the shared FIFO has a self-checking testbench in
`tb/`. The FIFO is exercised through both DMA engines. Each testbench
prints `TB_RESULT checks=N failures=M`.

| testbench            | what it checks |
|----------------------|----------------|
| `tb_ca_regs`         | register read-back, start/stop pulses, frozen configuration, done and count |
| `tb_ca_read_dma`     | order and content of all words under random latency and refusals; full rate; stop |
| `tb_ca_pixel_weight` | all modes against an exact integer reference; 26-clock latency; stalls |
| `tb_ca_accum`        | sums for 2x2..32x32 and odd sizes, mid-word sub-aperture ends, stalls; 2x2 at one result per clock |
| `tb_ca_divider`      | quotient and remainder flag against wide-integer division; 38-clock latency; stalls |
| `tb_ca_fix2float`    | hand-worked values (including ties), NaN, and random values against integer rounding |
| `tb_ca_fp_offset`    | edges, centre and tiny values; random inputs for every N against exact integer subtraction |
| `tb_ca_write_dma`    | order, addresses, hold while not ready, FIFO full under back-pressure |
| `tb_centroid_accel`  | end to end at default parameters, against a pixel-by-pixel reference |
| `tb_ca_workloads`    | the measured data sets, see below |

`tb_centroid_accel` connects the top to `ca_host_model`, a behavioural host
memory with random latency and random refusals. It makes each mechanism
happen and counts it, and any mechanism that never happens is a failure:

- read refusals;
- stalls from a full output FIFO;
- pipeline bubbles;
- sub-apertures ending inside a word;
- all three weightings;
- empty sub-apertures;
- a stop command;
- multi-sub-aperture runs.

`tb_ca_workloads` runs the data sets behind the published timings at the
default parameters, with a host that is always ready. It checks every
centroid and the clock count:

| data set | clocks | ns/byte at 100 MHz |
|---|---|---|
| 4 KB as 128 x 4x4 or 2 x 32x32 | 605 | — |
| 2 MB of 4x4 | 262,237 for 262,144 words | 1.25 |
| 2 MB each of 8x8 to 32x32 | 262,193 to 262,237 | — |

The 2 MB runs take the same time whatever the sub-aperture size. 1.25
ns/byte is the bandwidth-limited figure reported for the hardware. Clock
frequency itself is not a property of the RTL.

### Running with Verilator

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/ca_pkg.sv tb/tb_centroid_accel.sv --top-module tb_centroid_accel
./obj_dir/Vtb_centroid_accel
```

Use the same command for any other testbench. Lint a module with
`verilator --lint-only -Wall -Irtl -y rtl rtl/ca_pkg.sv rtl/<module>.sv`.

### Changing the design

- `MAX_N` (top and `ca_accum`) sets the largest sub-aperture. The sum
  widths, divider width and position counters follow from it.
  `ca_pkg::NSZ_W` must hold `MAX_N`.
- `FRAC_W` sets the fraction bits of the quotient, and one divider stage is
  added per bit.
- `RD_FIFO_DEPTH` should exceed the host read latency in clocks to keep the
  full rate.
- `WR_FIFO_DEPTH` only affects how often a slow write channel stalls the
  pipeline.
