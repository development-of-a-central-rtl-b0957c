# TDSCAN: a fixed-latency density trigger for a SiPM Cherenkov camera

The proposed SiPM camera for the CTA Large-Sized Telescopes produces a first-level (L1)
trigger decision every nanosecond: for each of its 1141 clusters of 7 pixels, one bit says
whether the summed pixel signal crossed a threshold. Most of those bits come from night-sky
background light. They are isolated and random. A gamma-ray shower instead lights up a compact
group of neighbouring clusters over a few consecutive frames. The camera-level (L2) trigger has
to tell the two apart at the full frame rate with a fixed latency.

TDSCAN (Trigger Distributed Spatial Convolution Accelerator Network) does this with a
DBSCAN-like density test that maps onto a pipeline. Each cluster gets a count of the set L1
bits around it:

- in space, inside a hexagonal kernel of radius `eps_xy` (the cluster and its 6 neighbours
  for `eps_xy = 1`);
- in time, in its own frame and in the `eps_t` frames before and after it.

The cluster's L2 bit is set when that count is **above** `minPts`. A worked example: with
`eps_xy = 1`, `eps_t = 1` and `minPts = 7`, kernel counts of 5, 3 and 0 in frames N-1, N and
N+1 add up to 8, so the cluster fires in frame N. Because every cluster is computed in
parallel and the frames are pipelined, the filter takes one frame per clock.

This repository holds SystemVerilog for the TDSCAN core and for the test firmware built
around one instance. That firmware is a host that loads frames over IPBus, two 500-frame
FIFOs, a latency counter and the slaves that expose them. All of it is parameterised. The
defaults are the configuration of the published test: 1141 clusters, `eps_xy = 1`,
`eps_t = 1` and 500 x 1141 FIFOs.

## Camera geometry and the frame bit order

1141 is the centred hexagonal number 3·19·20 + 1. The cluster grid is therefore treated as a
full hexagon of 19 rings around a centre cluster. Clusters are addressed with axial hexagon
coordinates (q, r), where |q|, |r| and |q+r| are all at most 19.

**Bit i of a frame is the i-th cluster in row-major order.** Rows run from r = -19 to +19, and
within a row q rises from its smallest legal value. On the real camera, the bit order follows
how front-end boards (7 clusters each, 163 boards) are cabled to the trigger board. That
mapping is not published as data. A different order only means permuting the input and output
bits; the neighbour wiring is derived from coordinates, not from bit positions.

The geometry lives in `tdscan_pkg` as constant functions:

- `hex_cells(R) = 3R(R+1)+1` gives the number of cells in a hexagon of radius R.
- `hex_row_start` gives the index of a row's first cell in closed form:
  - for r ≤ 0, with n = r+R: `n(R+1) + n(n-1)/2`;
  - for r > 0: that value at r = 0, plus `r(2R+1) - r(r-1)/2`.
- `hex_index(R, q, r)` returns the frame bit of cell (q, r), or -1 outside the camera.
- `kernel_dq` and `kernel_dr` list the offsets of a kernel of radius E, which is the hexagon
  of radius E itself.

The functions are evaluated at elaboration. Each cluster's kernel becomes fixed wiring. Kernel
cells outside the camera read as 0, so edge clusters have smaller kernels: corners have 4
cells and other edge clusters 5.

## The TDSCAN pipeline (`tdscan`, `hex_convolve`)

```
s_axis ─► input reg ─► hex_convolve ─► count window ─► Σ over window ─► > minPts ─► output reg ─► m_axis
          1141 bit     1141 x 3 bit    3 x (1141 x 3)   5 bit / cluster            1141 bit
```

- **Convolution.** `hex_convolve` is combinational. Every kernel weight is 1, so it is a
  per-cluster population count of `hex_cells(eps_xy)` bits: 0..7 in 3 bits for the default.
- **Window.** `2·eps_t + 1` registers hold the counts of consecutive frames. Slot 0 is the
  newest and slot `eps_t` is the frame being computed. Counts are kept rather than raw frames,
  so each frame is convolved once.
- **Sum and threshold.** Each cluster's counts are added across the window (0..21 in 5 bits
  for the default) and compared with `sum > min_pts`. The result is registered.

### When the window moves

The window shifts only when a frame arrives. A gap in the input stream is not an empty frame,
so results do not depend on how the stream is paced. Consequently a frame's result cannot
leave until the `eps_t` frames after it have arrived.

### Batch ends (`tlast`)

A frame with `s_axis_tlast` ends a batch. The core then:

1. shifts in `eps_t` empty frames, so the last frames reach the centre and are computed;
2. clears the window for one cycle, so the next batch starts with nothing before it.

Frames at either edge of a batch therefore see zeros beyond it. Each batch costs
`eps_t + 1` cycles, during which `s_axis_tready` is low. The published test also processed
its data in 500-frame batches. It attributed a small latency overhead and a 1.4 % mismatch
against a software model to each batch's start-up. This design's batch handling has the same
consequence: edge frames see empty frames beyond the batch, where an endless stream would
have real ones.

### Flow control

The stream interfaces use AXI4-Stream naming: valid, ready, data and last. `m_axis_tready` low
freezes the whole pipeline. Apart from batch ends, the core takes a frame every clock.

### Timing

With a continuous stream and no back-pressure, a frame accepted at clock edge e is valid on
`m_axis` after edge `e + eps_t + 2`. It is taken at edge `e + eps_t + 3`. `min_pts` is used when
the window sum is registered, so change it only between batches.

## Test firmware (`tdscan_test_top`)

```
IPBus ─► fabric ─┬─► In Vector slave ─► input FIFO 500x1141 ─► TDSCAN ─► output FIFO 500x1141 ─► Read FIFO slave ─┐
                 │                                               │                                                │
                 ├─► Counter reg. slave ◄── latency counter ◄────┘                                                │
                 └──────────────────────────────────────── read bus ◄─────────────────────────────────────────────┘
```

The IPBus protocol core, which turns Ethernet/UDP packets into bus transactions, is not
included. The top's `ipb_in`/`ipb_out` ports are its slave bus: address, write data, strobe and
write in one direction; read data, ack and err in the other. Each slave acts in the first
strobe cycle and answers one cycle later.

### Register map (32-bit word addresses)

| address   | slave     | access | meaning |
|-----------|-----------|--------|---------|
| 0x00-0x23 | In Vector | R/W    | staging frame, word k = bits 32k+31..32k |
| 0x24      | In Vector | W      | push the staged frame into the input FIFO; wdata[0] = tlast. err if the FIFO is full |
| 0x25      | In Vector | R/W    | [0] run, [15:8] minPts (reset value 7) |
| 0x26      | In Vector | R      | input FIFO fill level |
| 0x40-0x63 | Read FIFO | R      | head output frame, word k = bits 32k+31..32k |
| 0x64      | Read FIFO | R      | status {empty, tlast, 14'b0, fill level[15:0]} |
| 0x64      | Read FIFO | W      | pop the head frame (err if empty) |
| 0x80      | Counter   | R/W    | latency count; a write clears the counter |
| 0x81      | Counter   | R      | frames that left TDSCAN |

Any other address answers err.

### A run

1. Write up to 500 frames. Each frame is 36 word writes plus a push; the last frame is pushed
   with tlast.
2. Clear the counter.
3. Write `run` together with minPts.

The input FIFO then feeds TDSCAN at one frame per clock. `run` clears itself when the tlast
frame leaves the FIFO. Results collect in the output FIFO and are read back frame by frame.
A full output FIFO stalls TDSCAN instead of losing frames.

### Latency counter

The counter counts every cycle in which at least one frame is inside TDSCAN, from the cycle
the first frame enters to the cycle the last one leaves, both included. A batch of F frames
therefore reads **F + eps_t + 3** cycles: 504 for 500 frames. Loading 10^6 frames as 2000
such batches, one at a time, would count 1,008,000 cycles. Feeding the same 2000 batches back
to back costs only `eps_t + 1` cycles per batch end, and the count is then
10^6 + 2·1999 + 4 = 1,004,002. The published firmware measured 1,014,000. Its extra
six cycles per batch come from its own batch start-up and clock-domain crossings, which are
not described and not reproduced here.

## What follows the published design and what is this design's own

These follow the published design:

- the TDSCAN rule and its three parameters;
- the strict `>` comparison with minPts;
- the all-ones hexagonal kernel;
- the pipeline structure: input register, convolution, three count registers, adder,
  threshold, output register;
- the 1141-bit frames and the 500 x 1141 FIFOs;
- the set of blocks in the test firmware and how data flows between them.

These are this design's own choices:

- the hexagon coordinates and the frame bit order;
- the stream handshake, including tready, tlast and batch draining;
- a single clock for everything (the published firmware runs TDSCAN and its FIFOs at 400 MHz,
  with clock-domain crossings toward IPBus that this design omits);
- first-word-fall-through FIFOs built over a plain array;
- the IPBus register map and the `run` bit;
- the minPts register and its reset value of 7;
- the exact start and stop of the latency counter, and the extra frame counter;
- the address decoder;
- synchronous active-high reset.

### Not built

These parts of the trigger board are not built here:

- the split of the camera over three L2 FPGAs with overlapping boundary bits (the
  cluster-to-board map exists only as a picture);
- the concentrator FPGA's functions: neighbour trigger, stereo (L3) trigger, White Rabbit
  timestamps and threshold feedback;
- the optical links and transceivers;
- the PRBS link tests;
- the CNN alternative.

## Files

- `rtl/tdscan_pkg.sv`: camera geometry (constant functions).
- `rtl/ipbus_pkg.sv`: IPBus bus structs and the register map.
- `rtl/hex_convolve.sv`: the per-cluster hexagonal kernel count.
- `rtl/tdscan.sv`: the TDSCAN core.
- `rtl/sync_fifo.sv`: the frame FIFO.
- `rtl/ipb_in_vector_slave.sv`, `rtl/ipb_read_fifo_slave.sv`, `rtl/ipb_counter_slave.sv`,
  `rtl/ipb_fabric.sv`: the IPBus side.
- `rtl/latency_counter.sv`: the latency counter.
- `rtl/tdscan_test_top.sv`: the test firmware top.
- `tb/*_tb.sv`: self-checking testbenches, one per module plus the full-size and stream runs. Each prints
  `TB_RESULT checks=N failures=M`.
- `tb/tdscan_check.sv`, `tb/tdscan_top_driver.sv`, `tb/ipb_master_bfm.sv`: reusable harnesses.
  Respectively: the core checker, the host model, and the IPBus master model.

## Simulating

With Verilator 5, from the folder that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/ipbus_pkg.sv rtl/tdscan_pkg.sv tb/tdscan_test_top_full_tb.sv \
    --top-module tdscan_test_top_full_tb
./obj_dir/Vtdscan_test_top_full_tb
```

`-y` lets Verilator find every other module, including the helpers in `tb/`, by its file name.
Any other testbench runs the same way with its own name.

The testbenches compute expected results with their own model of the camera and the rule: they
walk the hexagon row by row and measure hexagon distance, sharing no code with the RTL. The
testbenches are:

- **`tdscan_tb`** runs the core at full size, and also a radius-4 camera with `eps_xy = 2`,
  `eps_t = 2`. It uses random frames, input gaps, output stalls and batch ends, and replays the
  worked example above. It also checks the `eps_t + 3` latency and back-to-back acceptance.
- **`tdscan_test_top_tb`** drives the whole firmware through IPBus at reduced size (61 clusters,
  8-frame FIFOs). It exercises:
  - batches with exact latency counts;
  - minPts changes;
  - a push into a full FIFO;
  - output back-pressure stalling TDSCAN;
  - unmapped addresses.
- **`tdscan_test_top_full_tb`** runs the firmware with every parameter at its default. It
  streams a 500-frame and a 499-frame batch, and checks all 999 results and both latency
  counts. It needs a few seconds after compilation.

- **`tdscan_stream_tb`** streams 10^6 full-size frames through the core: 2000 back-to-back
  500-frame batches, each with its own random occupancy between 2 % and 25 %. It compares every
  output frame with the model and checks the 1,004,002-cycle latency count. It needs about two
  minutes.

Changing `HEX_RADIUS`, `EPS_XY`, `EPS_T` or `FIFO_DEPTH` on the top or the core rescales
everything, including count and sum widths. Camera sizes other than full hexagons are not
supported.
