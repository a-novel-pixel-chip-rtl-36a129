# ROIRC: region-of-interest readout for a Topmetal pixel chip

A large pixel chip is mostly empty. A particle track lights up a few hundred
pixels out of 182 272 and leaves the rest at their baseline. Reading every
pixel in every frame (a rolling shutter) therefore spends almost all of its
time on pixels that carry nothing. In the ROIRC, the readout watches only a
sparse grid of **sentinel pixels**. It reads the pixels around a sentinel
only when that sentinel's value jumps. Sentinels are one every 5 rows and 5
columns, 72 × 103 = 7416 of them, so a sentinel frame takes 741.6 µs instead
of 18.2 ms. When a sentinel fires, the design reads the **block** of 5 × 5
pixels centred on it. It also reads the neighbouring blocks (**inflation**),
so the weak edge of a track is not lost. Sentinel monitoring then resumes.

The work is split between two places:

- **The chip's scanning module.** This is an addressable row/column scanner.
  It is programmed serially with a start, step and end value per axis.
- **The co-processor in the FPGA.** It decides what to scan next, programs
  the scanner, and compares sentinel frames. It marks trigger blocks and
  sends the samples to the host.

This repository holds synthesizable SystemVerilog for both halves, a
behavioural model of the pixel array and ADC, and a self-checking
testbench for every block.

## Block map

```
               host                                      pixel chip
 enable, cal_mode, thresholds,        +-----------------------------------------+
 sentinel grid                        | scanning_module                         |
        |                             |  scan_param_reg (row)  <29:0>           |
        v                             |  scan_param_reg (col)  <29:0>           |
 +------------------------------+  6 serial lines, CLK_SHIFT, SHIFT_EN          |
 | param_config   clocks,       |---------->|  scan_addr_counter (CLK_PIX)     |
 |                serialiser    |  LOAD_DATA, PIX_EN, CLK_PIX                   |
 | enable_control SHIFT/LOAD/EN |---------->|  addr_decoder -> ROW_SEL<355:0>  |
 | scan_logic_control (FSM)     |           |  addr_decoder -> COL_SEL<511:0>  |
 | adc_data_analysis            |<-- PIX_ROW/PIX_COL ---------------------------+
 | trigger_detection            |<-- ADC code of the selected pixel
 | data_readout  -> records --> host
 +------------------------------+
```

`roirc_top` wires all of these together. Its ports are plain signals and
packed structs from `roirc_pkg`.

## Clocks and the configuration sequence

There are two clocks, as on the real chip:

| clock | rate | used by |
|---|---|---|
| CLK_SHIFT | 50 MHz | the co-processor, and the serial parameter registers on the chip |
| CLK_PIX | 10 MHz | the chip's address counter and select registers; one pixel per period (T_scan = 100 ns) |

`param_config` makes CLK_PIX from the 50 MHz clock with a divide-by-5 phase
counter. The output flop runs on the falling clock edge. This puts the
rising edge of CLK_PIX half a fast cycle away from every co-processor edge,
so signals crossing between the two clocks have clean setup and hold. The
counter also gives the co-processor `pix_last`, which marks the last 20 ns of
each pixel period. The ADC code of a pixel is sampled then, just before the
switches move on.

A new scan is set up in three steps:

1. **Snap.** `param_config` captures the six 10-bit values: row and column
   start, step and end.
2. **Shift.** `enable_control` raises SHIFT_EN for 10 fast cycles. The six
   values leave MSB first on six serial lines, so they arrive in parallel.
   On the chip, each axis register is a 30-bit shift register
   {end, step, start}.
3. **Load.** LOAD_DATA is raised for one cycle, and PIX_EN rises with it. The
   load must land on a CLK_PIX rising edge. If the last shift bit falls just
   before one, the whole configuration takes 10 + 1 cycles = 220 ns, which
   is the T_data the design aims for. Otherwise it waits up to 4 more fast
   cycles.

The address counter copies the parameters at the load. A new set can
therefore be shifted in while the previous scan is still running.

## Scanning

`scan_addr_counter` walks in row–column order. The column is the inner
loop: start, start+step, … as long as the value stays ≤ end. Then the row
advances the same way. After the last row the counter wraps to the start.
A step of 0 holds that axis at its start.

`addr_decoder` turns each address into a registered one-hot select vector,
ROW_SEL<355:0> and COL_SEL<511:0>, which closes one switch per axis. The
binary address and a valid bit travel alongside the select vectors to the
co-processor. This is how the co-processor knows which pixel the next ADC
code belongs to.

## Sentinel frames and trigger pixels

In sentinel mode, `scan_logic_control` programs the whole sentinel grid.
By default that is rows 0..355 and columns 0..511 with step 5. The scan then
runs for exactly one frame. Each sample goes to `adc_data_analysis` with its
linear sentinel index, i·103 + j.

`adc_data_analysis` is a two-stage pipeline around a memory of one 12-bit
word per sentinel:

- **Stage 1** reads the previous frame's value.
- **Stage 2** writes the new value and forms `diff = new − previous`.

A sentinel is a **trigger pixel** when `diff > threshold`. A hit makes the
output step upward, so only rises count, and a pixel that decays back does
not trigger a second time. The threshold is an input; 200 ADC codes is the
operating value. No comparisons are made in the first frame after reset or
after the sentinel grid changes, because the stored values would belong to
other pixels.

**Bad-pixel masking.** Noisy sentinels would fire in every frame. The fix is
a calibration mode, run with no signal present. In it, no region is read.
Instead, every sentinel whose |diff| exceeds the mask threshold gets a mask
bit for good. Masked sentinels never trigger afterwards. The mask threshold
is 100 mV, about 205 codes at 0.49 mV per code. `mask_clr` empties the mask.

Each trigger sets one bit in the **trigger map** in `trigger_detection`.
The map is 72 × 103 bits, one per block.

## Blocks, inflation and region scans

This is the heart of the design.

**What a block is.** A block is one sentinel pitch square, centred on its
sentinel. With pitch 5, the block of sentinel (r, c) covers rows r−2..r+2
and columns c−2..c+2. That is 25 pixels, clipped at the array edge.

**Inflation.** Inflation adds the eight neighbouring blocks of every
trigger block. `trigger_detection` computes it one block row at a time, with
no second map:

1. Read map rows q−1, q and q+1, then OR them. This gives vertical
   neighbours.
2. OR that result with itself shifted one column left and one column right.
   This gives horizontal and diagonal neighbours.

A lone trigger therefore gives 3 × 3 blocks = 15 × 15 = 225 pixels. The
publication's text says 361 pixels for this case, but its inflation figure
shows exactly the eight-neighbour rule. The design follows the figure.
Inflation can be switched off with `dilate_en`; then only the trigger
blocks are read.

**Runs.** Programming the scanner costs T_data each time. Marked blocks
that touch along a block row are therefore read as one rectangle, called a
**run**, instead of block by block. `trigger_detection` answers the query
"first marked block at or after column p in block row q, and where does its
run end". The controller then asks again from just past the end. Runs are
found in row order, then column order. Events that lie apart produce
separate runs, so each gets its own region.

**Region scan.** After the whole sentinel frame is done and at least one
trigger exists, `scan_logic_control` works through the runs:

1. Ask `trigger_detection` for the next run.
2. Turn the run into a pixel rectangle. The rows come from the block row;
   the columns run from the first block's left edge to the last block's
   right edge. Both are clipped to the array.
3. Program the rectangle with step 1 and read it pixel by pixel, 100 ns per
   pixel.
4. Repeat until no run is left.

The map is then cleared, and sentinel monitoring restarts. The next sentinel
frame compares against the frame before the region scan. A still-bright
event therefore does not fire again; only new rises do.

## Records to the host

The controller emits 42-bit records (`rec_t`: kind, row, col, data) into
`data_readout`:

| kind | when | data |
|---|---|---|
| REC_FRAME | start of each sentinel frame | frame number |
| REC_SENTINEL | each sentinel sample | ADC code |
| REC_BLOCK | start of each run | {last row, last col}; row/col hold the first pixel |
| REC_REGION | each pixel of a run | ADC code |

`data_readout` is a 16-deep FIFO with a valid/ready output. When the host
falls behind, records are dropped and counted in `overflow_cnt`; `word_cnt`
counts the records delivered. The top also exports counters for frames,
regions, runs, masked sentinels and trigger sentinels.

## Sizes and parameters

| parameter | default | meaning |
|---|---|---|
| N_ROWS × N_COLS | 356 × 512 | pixel array |
| MIN_STEP | 5 | smallest sentinel pitch the memories are sized for (72 × 103) |
| DIV | 5 | CLK_SHIFT / CLK_PIX |
| FIFO_DEPTH | 16 | record buffer |
| AW, ADC_W | 10, 12 | address and ADC widths |

A finer sentinel grid can still be scanned. Its sentinels beyond the 72 × 103
memory are sampled but not compared.

## What is not here

The following parts are analog or bought in; a behavioural model in the
testbenches stands in for the pixel array and ADC:

- the pixels themselves (electrode, charge amplifier, source followers)
- the output buffer, biasing and level translation
- the ADC
- the board's DACs, clock chip, memory and PCIe link

The chip's SF_DIN, LOAD_SF, CLK_SF and DATA_EN pins appear without any
description, so they are not implemented. The publication also mentions
adjusting block sizes for sentinels at the edge of an event, but gives no
rule for it, so that is not implemented either.

## Verification

Each block has a self-checking testbench in `tb/` that compares it with a
reference model written independently in the testbench.

`tb_roirc_top` runs the complete design at full size with default
parameters, against the pixel/ADC model, through these phases:

- calibration with a noisy pixel
- quiet frames
- a single event
- the same event a frame later
- two separate events
- a long track whose faint end is below threshold, so only inflation
  brings it into the region
- a run with inflation off

For each event it checks that the pixels read are exactly the expected
inflated block set and that they cover the whole event. It also checks the
frame period, the 100 ns pixel rate and that every mechanism actually
occurred.

## Where this design departs from the publication

- **Size of a single-trigger region.** The design reads 225 pixels (3 × 3
  blocks). The publication's text quotes 361, which would be 19 × 19 and does
  not fit its own inflation figure.
- **Adjacent blocks.** The publication reprograms the scanner before every
  block: T_block = T_data + 25 × T_scan. Here, blocks that touch along a
  block row form one run, so one configuration covers several blocks.
- **Configuration time.** The configuration time is 220 ns only when the
  load happens to meet a CLK_PIX edge. Otherwise it is up to 300 ns.
- **Dead time.** The publication gives a maximum dead time of 709.24 µs.
  It could not be re-derived, so the design does not aim for it. A sentinel
  frame here is 7416 × 100 ns plus one configuration, 741.8 µs. The
  publication's frame-rate table gives 0.7 ms.
- **Blocks at an event's edge.** The publication adjusts the size of these
  blocks, but gives no rule for it. All blocks here have the same size.
- **Things the publication leaves open**, chosen here: reset, the bit order
  of the serial parameters, the record format, and the sample moment.

## Simulating

Every testbench stands alone. Here is the full-size end-to-end run with plain
Verilator 5:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb \
    rtl/roirc_pkg.sv tb/pixel_adc_model.sv tb/tb_roirc_top.sv \
    --top-module tb_roirc_top -y rtl
./obj_dir/Vtb_roirc_top
```

About the full-size run:

- It builds in about 20 s and simulates about 494 000 clock cycles.
- It ends with a `TB_RESULT checks=… failures=…` line.

About the other testbenches:

- They are run the same way with their own top module.
- `tb_scan_logic_control` uses a 30 × 40 array, so each decision can be
  followed record by record.
- All block parameters have defaults, so any module in `rtl/` can be
  elaborated as a top on its own.
