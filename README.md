# Atom-detection accelerator for tweezer-array images

A neutral-atom quantum computer holds its qubits as single atoms in a grid of optical tweezers. To find out which tweezers hold an atom, the array is photographed. Each atom shows up as a blurred spot, shaped by the point-spread function (PSF) of the optics. Neighbouring spots overlap. The system must turn the camera image into one bit per site within microseconds, so that rearrangement or mid-circuit readout can go on.

This core does that with a linear method. The image is modelled as a sum of PSF copies, one per site, each weighted by that atom's brightness. So the brightness of one site can be recovered with a fixed *projector* K. K is a 31 × 31 pseudo-inverse of the PSF and is computed once, offline, during calibration. At run time each site costs one dot product of K with the 31 × 31 image detail centred on the site, then a threshold:

```
P = Σ K[i,j]·I[i,j]            product sum  (dot product with the image detail)
M = Σ K[i,j]·u(i,j)            matrix sum   (u = 1 where the window pixel lies inside the image)
S = Σ K[i,j]                   kernel sum   (constant for a run)
d = P · M / S                  emission
state = (d >= threshold)
```

For a site far from the edge, M = S and d = P. For a site near the edge, part of the window falls off the image. The M/S factor then rescales the emission by the share of the projector that was used.

The core reads everything it needs from memory over a 512-bit AXI4 master port. It writes the emissions and a state bitmap back the same way. A host sets it up and starts it through a small AXI4-Lite register file.

## Pipeline

Six stages work on different atoms at the same time:

```
 coordinate table ──► boundary_extraction ──desc──► image_extraction ──rows──► data_cache (2 banks)
                         (AXI read, ID 1)            (AXI read, ID 0)              │ full bank
                                                                                   ▼
 memory ◄── output_writer ◄── output_aggregation ◄── FIFO(4) ◄── image_convolution (31 vector units)
           (AXI write)        d = P·M/S, threshold
```

* **boundary_extraction** reads the coordinate table, one 512-bit beat (16 sites) at a time. For each site it computes the window's top-left corner, which can be negative or beyond the image. It also computes the range of columns inside the image and two 31-bit masks, `row_use` and `col_use`; u(i,j) = row_use[i] & col_use[j]. The stage then hands a descriptor to the next stage.
* **image_extraction** first loads the projector once per run: 31 rows of 2 beats each. While doing so it adds up S. Then, for each descriptor, it reads one burst per image row that lies inside the image. Only the beats that hold the window's in-image columns are fetched. It shifts the 16 pixels of each beat into their window columns and writes them into the data cache. Row requests are issued ahead of the returning data, so the read channel stays busy.
* **data_cache** holds the projector and two banks of 31 × 31 pixels in flip-flops, so all 961 pairs can be read in the same cycle. One bank is filled while the other waits for, or feeds, the convolution. Fetching the next atom therefore overlaps the work on the current one. Before a bank is filled it is cleared, so pixels outside the image read as zero.
* **image_convolution** has 31 vector units, one per window row. Each unit multiplies its projector row with its image row and reduces the 31 products in a pipelined adder tree. A second tree in the same unit reduces the masked projector row, giving the row's share of M. Two more trees add the 31 row results. The stage takes a new atom every cycle, with a latency of 11 cycles: 1 multiplier register plus 5 + 5 adder-tree levels.
* **output_aggregation** computes M/S with a restoring divider that produces one quotient bit per cycle. It then multiplies the ratio with P, rescales, saturates and compares the result with the threshold. This takes 26 cycles per atom, or 3 when no division is needed.
* **output_writer** packs 16 emissions per beat and 512 state bits per beat. It writes each beat once it is complete, or at the end of the run, using byte strobes for partial beats. It raises *done* after the last write response.

### Flow control

Each stage hands work on with a valid/ready handshake, except the cache banks, which use full/free flags.

The convolution has no stall input. A bank is therefore taken only when three things hold:
1. the bank is full;
2. the projector has been loaded;
3. fewer than 4 atoms are between the convolution input and the 4-deep FIFO in front of the aggregation.

This credit count means no result can be lost when the aggregation or the writer is slow.

Boundary and image extraction share the read channel through a round-robin arbiter. The arbiter sets ARID to the requester's number and routes read data back by RID.

## Window fetch and the 512-bit bus

Pixels are 32-bit words, 16 to a beat, and image rows are stored one after another. A 31-pixel window row usually straddles two or three beats:

* if the window starts on a 16-pixel boundary, the row takes 2 beats;
* otherwise it takes 3 beats (or fewer if columns are clipped at an edge).

The reader fetches whole aligned beats. It then picks each pixel's lane from the difference between the window's first column and the beat's first column.

The projector is stored as 31 rows of 32 words: elements 0..15 in the first beat, and 16..30 plus one pad word in the second.

Reading dominates the run time. A window costs up to 31 × 3 = 93 beats at one beat per cycle, while the convolution needs one cycle per atom. The compute array is therefore idle most of the time, and throughput follows memory bandwidth. The arithmetic never limits it.

## Number formats

| Quantity | Format |
|---|---|
| pixel I | 32-bit unsigned integer |
| projector K | 32-bit signed, 16 fraction bits (Q16) |
| product sum P | 75-bit signed (exact: 65-bit products, 31 × 31 terms) |
| matrix sum M, kernel sum S | 42-bit signed (exact) |
| ratio M/S | 22 bits, 20 of them fraction bits, saturating just below 4 |
| emission d, threshold | 32-bit signed, 8 fraction bits (d = value × 256), saturating |

All sums are exact integers, so the only rounding is in the ratio (truncated to 2⁻²⁰) and the final shift. Other special cases:
* If S = 0, the ratio is taken as 1.
* If the ratio would reach 4 or more, it saturates and the division is skipped.
* The sign of M/S is kept, so projectors with negative sums work.

## Host interface

### Registers (AXI4-Lite, 32-bit, byte strobes honoured)

| Offset | Name | Meaning |
|---|---|---|
| 0x00 | CTRL | bit 0 START: write 1 to start. If the core is busy, the start is held and runs next. bit 1 DONE: set at the end of a run, cleared when read. bit 2 IDLE. bit 3 READY. |
| 0x10 / 0x14 | IMG_BASE lo/hi | byte address of pixel (0,0); 64-byte aligned |
| 0x18 / 0x1C | KER_BASE lo/hi | projector, 31 rows × 128 bytes |
| 0x20 / 0x24 | COORD_BASE lo/hi | coordinate table, one 32-bit word per site: column in bits 15:0, row in bits 31:16 (the window's centre pixel) |
| 0x28 / 0x2C | OUT_BASE lo/hi | emissions, one 32-bit word per site, in site order |
| 0x30 / 0x34 | STATE_BASE lo/hi | state bitmap, bit n = site n (little-endian within 64-byte beats) |
| 0x38 | NUM_ATOMS | number of sites |
| 0x3C | IMG_W | image width in pixels; must be a multiple of 16 |
| 0x40 | IMG_H | image height in pixels |
| 0x44 | THRESHOLD | in emission units (value × 256) |

All base addresses must be 64-byte aligned. A run with NUM_ATOMS = 0 finishes at once.

### AXI4 master

The AXI4 master is 512 bits wide with 64-bit addresses and 4-bit IDs. Its channels are passed as packed structs (`axi_ax_t`, `axi_r_t`, `axi_w_t`, `axi_b_t`, defined in `recon_pkg`), each with its own valid/ready pair:
* Reads are INCR bursts of up to 62 beats, and at most two requesters have reads outstanding.
* Writes are single beats.

Read responses must come back in order for each ID. This is normal AXI behaviour. Error responses (RRESP, BRESP) are not examined: a failed transfer is not reported to the host.

## Timing

These figures are measured in simulation at 100 MHz, using a memory with 4-cycle read latency and no stalls:

| Workload | Cycles | Time at 100 MHz | Reported for the original FPGA design |
|---|---|---|---|
| 10 × 10 sites, 256 × 256 image | 9,711 (97 per site) | 97 µs | 115 µs |
| 40 × 40 sites, 1024 × 1024 image | 152,415 (95 per site) | 1.52 ms | 1.825 ms |

Per site, the cost is about 2 beats per window row when the window is 16-aligned and 3 otherwise, plus a few cycles per site to turn around. Run time therefore grows linearly with the number of sites. Image size matters only through the address range. Nothing inside the core grows with the array or the image.

## What follows the original design and what is this design's own

These parts follow the design this core is based on:
* the split into boundary extraction, image extraction, convolution and output aggregation, working as a dataflow;
* the 512-bit bus carrying 16 × 32-bit words;
* a 31 × 31 projector held in registers;
* two cache banks, so the next atom is fetched during the current convolution;
* 31 parallel vector units, each with a pipelined adder tree of 5 levels for 31 elements;
* the output equation, including edge normalisation;
* thresholding in hardware.

These choices are this design's own:
* **Fixed point instead of floating point.** The published design was written in high-level synthesis with 32-bit data. Integer and Q16 fixed point are used here, with exact sums.
* **Projector loaded once per run** rather than once per atom. There is a single projector for all sites, so the results are the same.
* **Adder-tree depth.** The source describes the 31-element reduction both as "four stages" and as five clock cycles. Five register levels are built.
* **Combining the 31 row results** uses a second 5-level tree. How this was done originally is not described.
* **Memory layouts**: coordinate word, padded projector rows, emission array, state bitmap. The register map, the start/done protocol, the read arbiter, the credit scheme and the divider are also this design's own.
* **Resources.** The reported implementation used 447 DSP slices. This RTL has 961 full 32 × 32 multipliers, so it is much larger in DSP terms. The multipliers could be time-shared, given how much time the convolution spends idle waiting for memory.
* **Not part of the RTL:**
  * the host processor;
  * the calibration, which finds the grid and computes K and the threshold;
  * the DRAM and its controller;
  * the vendor interconnect.

  The testbenches use a behavioural AXI memory in place of the DRAM.

## Files

`rtl/`:
* `recon_pkg.sv`: sizes, number formats, AXI and descriptor structs.
* One file per stage, as listed above, plus:
  * `adder_tree.sv`;
  * `vector_unit.sv`;
  * `ctrl_regs.sv`: the register file;
  * `axi_rd_arb.sv`: the read arbiter;
  * `sync_fifo.sv`;
  * `reconstruction_ip.sv`: the top level.

`tb/`:
* One self-checking bench per module (`tb_<module>.sv`).
* `axi_mem_model.sv`: AXI4 memory with pipelined read latency, optional random stalls and a random write-response delay.
* `recon_env.sv`: the end-to-end environment, described below.
* `tb_reconstruction_ip.sv`: a small image with stalls, edge sites, sites outside the image and two runs. It requires every flow-control case to occur at least once: prefetch, 2- and 3-beat rows, edge normalisation, credit stall, write stall, arbiter conflict, partial write and memory stall.
* `tb_recon_full_10x10.sv` and `tb_recon_full_40x40.sv`: the smallest and largest evaluated workloads, at default parameters. Each checks the cycle budget (11,500 and 182,500 cycles).

The end-to-end environment builds a synthetic scene:
* a Gaussian PSF with σ = 2.5 px;
* random occupancy, with spot amplitude 400 on a background of 20 plus noise;
* K = PSF / ΣPSF².

It checks every emission bit-exactly against a model of the equation above. It also checks against the real-valued equation (within 1.5 LSB) and checks every state against the true occupancy.

Each bench prints one line, `TB_RESULT checks=N failures=M`, and has a watchdog.

### Simulating

Verilator 5 is needed. List the package first:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_recon_full_10x10 \
  -y rtl -y tb rtl/recon_pkg.sv tb/tb_recon_full_10x10.sv
./obj_dir/Vtb_recon_full_10x10
```

The same pattern works for every bench. The 40 × 40 run takes about 10 seconds after a 30-second build.

### Changing it

* `KS`, the bus width and the number formats live in `recon_pkg`. The widths of the sums are derived from them.
* `AGG_DEPTH` on the top sets the number of atoms that can be in flight after the cache.
* The assertions in `data_cache`, `image_convolution`, `output_writer`, `sync_fifo` and the top check the bank handshake, the lock-step of the trees, result order and FIFO credit. Keep `--assert` on when changing the flow control.
