# Atom-image reconstruction accelerator

A neutral-atom quantum computer has to find out, several times per run, which
optical tweezer sites hold an atom. A camera takes a fluorescence image of the
array; the image is then reduced to one brightness value per site, and a
threshold on that value says "atom" or "no atom". This RTL implements the
reduction step in hardware, following the accelerator architecture published as
"Efficient Image Reconstruction Architecture for Neutral Atom Quantum Computing"
(Winklmann, Yu, Guo, Staudacher, Schulz): a projection-based reconstruction in
which each atom's brightness is a weighted sum of the pixels around it.

For every atom site at pixel (x, y) the accelerator computes

```
              sum  W(r,c) * P(r,c)
             r,c in window ∩ image
    e(x,y) = -----------------------          r, c = 0 .. 30
              sum  P(r,c)
             r,c in window ∩ image

    W(r,c) = image pixel at (x - 15 + c, y - 15 + r)
    P      = 31 x 31 projector kernel
```

and writes the list of `e` values (the *emission matrix*) back to memory.
The numerator is the *product sum*, the denominator the *matrix sum*; their
quotient is the normalized brightness of the site.

The work is the same for every atom and the atoms are independent, so the
design streams atoms through a fixed pipeline. Its size does not depend on the
number of atoms or on the image size, both of which are run-time registers.

## Data path at a glance

```
             AXI4-Lite                         512-bit AXI4 master
                |                                 |   ^
        recon_ctrl_regs                           |   |
           | start, cfg                 axi_read_arbiter   result_writer
           v                               ^   ^  |             ^
  boundary_extraction --ROI--> image_extraction   |             |
     (reads the grid)          (reads kernel, rows)             |
                                     | row writes               |
                                     v                          |
                                data_cache                      |
                            mat1: 31 projector vectors          |
                            mat2: 31 image vectors + mask       |
                                     | whole window, 1 clock    |
                                     v                          |
                          image_convolution                     |
                   31 x vector_unit (multiply + adder tree)     |
                   2 x adder_tree over the 31 partial sums      |
                                     | product sum, matrix sum  |
                                     v                          |
                           output_aggregation  --emission-------+
                             (divider, Q16.16)
```

Every arrow between stages is a valid/ready hand-off, so each stage works on a
different atom at the same time: while the divider normalizes atom *n*, the
convolution may hold atom *n+1* and the extraction unit is already fetching the
pixels of atom *n+2*.

## The stages

### Boundary extraction (`boundary_extraction`)
Reads the atom position grid, one 512-bit beat (16 atoms) per read, and for
each atom produces a region of interest (`roi_t` in `recon_pkg`): the image
coordinate `(x0, y0) = (x-15, y-15)` of window element [0][0], and the
inclusive column and row ranges of the window that lie inside the image. A
window that does not touch the image is flagged `empty`; it yields `e = 0`.

### Image extraction (`image_extraction`)
At the start of a run it reads the 31x31 kernel once, as a single 62-beat
burst, into the `mat1` half of the data cache. For each ROI it clears `mat2`
and issues one read burst per image row inside the window. A row of the window
is 31 pixels of 16 bits (62 bytes), so depending on its alignment it spans one
or two 64-byte beats; the burst covers exactly the beats holding the row's
in-image pixels. Read requests are issued without waiting for data, so that
the memory can stream.

Decoding a beat is the fiddly part. For each of the 31 window columns `c` the
unit computes the pixel's byte address `row_base + 2*(x0 + c)`; if that
address falls in the beat now on the bus (same 64-byte line) and the column is
inside the image, the element takes the 16-bit pixel at lane
`address[5:1]`, zero-extended to 32 bits, and its mask bit is set. All 31
elements are decided in parallel, so a beat is written into the cache in the
clock it arrives. Elements outside the image stay at 0 with a cleared mask.

When the last row of a window has arrived, the window is offered to the
convolution. The convolution copies what it needs in the clock it accepts the
window, so the cache can be cleared for the next atom right away.

### Data cache (`data_cache`)
Two banks of 31 vectors x 31 elements x 32 bits (`mat1` projector, `mat2`
image) plus a 31x31 in-image mask. It is built of flip-flops because the
convolution reads all 1922 elements in one clock. Writes are one row per
clock with a per-element enable.

### Image convolution (`image_convolution`, `vector_unit`, `adder_tree`)
The 31x31 element-wise product is split by rows over 31 vector units. Each
unit multiplies its 31 pairs in parallel (one registered stage), then two
adder trees reduce them: the products (product-sum path) and the projector
elements whose mask bit is set (matrix-sum path). An adder tree adds pairs
level by level, one level per clock; 31 operands need five levels
(31 → 16 → 8 → 4 → 2 → 1), so a vector sum takes five clocks. A second pair of
five-level trees adds the 31 vector results. From acceptance of a window to
its two totals is 1 + 5 + 5 = 11 clocks.

Widths grow without rounding: 32 x 32-bit products are 64 bits, a vector sum
69 bits, the window total 74 bits (`ACC_W`). The matrix sum is carried in the
same 74-bit type.

### Output aggregation (`output_aggregation`)
Divides product sum by matrix sum: the 74-bit product sum is shifted left by
16 and divided by a restoring divider on magnitudes, one quotient bit per
clock (90 clocks, plus load and sign fix-up: 92 clocks per atom). The result is
a signed Q16.16 value, rounded toward zero and saturated to 32 bits. A zero
matrix sum gives 0.

### Result writer (`result_writer`)
Writes each emission value as a single-beat AXI write with only its 32-bit
lane strobed, at `OUT_BASE + 4*index`, waits for the response, and after the
last response ends the run.

### Read port sharing (`axi_read_arbiter`)
Boundary extraction (ARID 0) and image extraction (ARID 1) share the one read
port; requests are granted round robin, a grant is held while ARREADY is low,
and read data is steered back by RID.

## Programming model

`recon_ctrl_regs` is an AXI4-Lite slave with 32-bit registers:

| offset | name      | access | meaning |
|--------|-----------|--------|---------|
| 0x00   | CTRL      | W      | bit 0 = 1 starts a run (ignored while busy) |
| 0x04   | STATUS    | R      | bit 0 busy, bit 1 done (cleared by the next start) |
| 0x08   | NUM_ATOMS | R/W    | atoms in the grid (16 bits) |
| 0x0C   | IMG_W     | R/W    | image width in pixels (16 bits) |
| 0x10   | IMG_H     | R/W    | image height in pixels (16 bits) |
| 0x14   | GRID_BASE | R/W    | byte address of the position grid (4-byte aligned) |
| 0x18   | KERN_BASE | R/W    | byte address of the kernel (64-byte aligned) |
| 0x1C   | IMG_BASE  | R/W    | byte address of the image (2-byte aligned) |
| 0x20   | OUT_BASE  | R/W    | byte address of the output (4-byte aligned) |
| 0x24   | CYCLES    | R      | clock cycles of the last run |

The `irq` output is high while STATUS.done is set.

Memory layouts (little endian within a 512-bit beat):

* grid: one 32-bit word per atom, `{y[31:16], x[15:0]}`, whole pixels;
* kernel: 31 rows of 31 signed 32-bit coefficients, each row padded to
  32 words (two beats);
* image: row-major, `IMG_W` unsigned 16-bit pixels per row;
* output: one signed Q16.16 word per atom, in grid order.

A run: write the size and address registers, write 1 to CTRL, wait for `irq`.

## Throughput

The divider sets the pace: an atom leaves the pipeline every ~93 clocks once
it is full. The extraction unit needs about 62 beats plus memory latency per
atom and runs ahead of it. Simulated at 100 MHz with a memory of 8 clocks
read latency:

| atom array | windows | image       | clocks  | time     | published |
|------------|---------|-------------|---------|----------|-----------|
| 10 x 10    | 105*    | 256 x 256   | 9 925   | 99.2 µs  | 115 µs    |
| 16 x 16    | 256     | 400 x 400   | 23 968  | 240 µs   |           |
| 22 x 22    | 484     | 544 x 544   | 45 172  | 452 µs   |           |
| 28 x 28    | 784     | 688 x 688   | 73 072  | 731 µs   |           |
| 30 x 30    | 900     | 736 x 736   | 83 860  | 839 µs   |           |
| 34 x 34    | 1156    | 832 x 832   | 107 668 | 1.08 ms  |           |
| 40 x 40    | 1600    | 976 x 976   | 148 960 | 1.49 ms  | 1.825 ms  |

\* 100 sites plus five extra windows at the borders and outside the image.
The published figures give only the 256x256 image size for the 10x10 array;
the other image sizes here assume the same 24-pixel pitch. The run time grows
linearly with the number of atoms, as in the published measurements.

## What follows the published design and what does not

Taken from the published architecture: the split into boundary extraction,
image extraction, data cache, image convolution and output aggregation; the
31x31 kernel; the 512-bit memory bus; decoding to 32-bit elements; the two
parallel paths (product sum and matrix sum); 31 parallel vector units; adder
trees that sum 31 elements in five clocks; normalization of each result;
the AXI-attached IP controlled by registers from the processor; the dataflow
coupling of the stages; a size independent of the array size.

Choices made here, where the publication gives no detail:

* **Projector.** The publication says the PSF kernel "is pre-processed into a
  projector" but not how. This design has no such step: the kernel table in
  memory is used directly as the projector, so software must supply the
  projector coefficients.
* **Normalization formula.** Taken as product sum divided by matrix sum.
* **Number formats.** 16-bit pixels, signed 32-bit integer projector
  coefficients, Q16.16 results. Whether the original uses integers or floating
  point is not stated.
* **Border handling.** Pixels outside the image count as zero, and the
  matching projector weights are left out of the matrix sum.
* **Whole-pixel positions.** Atom positions are integers; the window is
  centred on them. Sub-pixel placement is not supported.
* **Adder tree depth.** The publication speaks of a "four-stage adder tree"
  and of summing 31 elements in five clocks; 31 operands need five adder
  levels, and that is what is built.
* **Divider.** A bit-serial divider; it makes the design slightly faster than
  the published timing with a simple memory model, but the published design's
  own normalization rate is unknown.
* **Multiplier cost.** The published implementation reports almost no DSP
  blocks and about a quarter of the LUTs of its device. Here all 961
  multipliers are full 32 x 32-bit, as the 32-bit decoding suggests; on an
  FPGA they would take DSP blocks or many LUTs. The pixels only carry 16
  bits, so narrower multipliers are the first place to save area (`DATA_W` in
  `recon_pkg` also sets the kernel layout in memory).
* **Interfaces.** Register map, memory layouts, valid/ready hand-offs, ID use
  on the read port and one-word output writes are this design's own.

Not part of this RTL: the camera, the DDR memory and its controller, the
processor system and its memory ports, the AXI interconnect (all bought or
external parts; the top brings its AXI ports out), the calibration software
that finds atom positions, the PSF-to-projector step, and the thresholding
that turns emissions into occupancy (shown in the publication's results but
not placed in the accelerator).

## Simulation

Every module has a self-checking testbench `tb/tb_<module>.sv`; each prints
`TB_RESULT checks=N failures=M` and stops. `tb/axi_mem_model.sv` is a
behavioural AXI4 memory used by the testbenches that need one (read latency
and random stalls are parameters).

`tb_recon_ip` runs the whole accelerator at its default configuration on all
seven array sizes above, compares every emission with a model computed inside
the testbench, checks the published run-time bounds, and counts that each
mechanism happened: clipped and empty windows, one- and two-beat row bursts,
read-port contention, back-pressure between the stages, and overlap of
extraction with normalization. It takes about 15 s.

With Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/recon_pkg.sv rtl/*.sv \
    tb/axi_mem_model.sv tb/tb_recon_ip.sv --top-module tb_recon_ip -Mdir obj
./obj/Vtb_recon_ip
```

Replace `tb_recon_ip` by any other testbench name to run a unit test.
`axi_mem_model.sv` can be left on the command line for all of them.

## Files

* `rtl/recon_pkg.sv` – widths, types (`roi_t`, `cfg_t`, `ar_req_t`) and layouts
* `rtl/recon_ip.sv` – top level
* `rtl/recon_ctrl_regs.sv`, `rtl/axi_read_arbiter.sv`, `rtl/boundary_extraction.sv`,
  `rtl/image_extraction.sv`, `rtl/data_cache.sv`, `rtl/image_convolution.sv`,
  `rtl/vector_unit.sv`, `rtl/adder_tree.sv`, `rtl/output_aggregation.sv`,
  `rtl/result_writer.sv` – the stages
* `tb/` – testbenches and the memory model
