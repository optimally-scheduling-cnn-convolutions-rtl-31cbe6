# HWC: a convolution engine that keeps its partial sums at home

A convolution layer reads C input maps of H×H pixels, M kernels of C×R×R
weights, and writes M output maps of E×E pixels. Computed naively, each
output pixel's C·R·R-term sum is spilled to memory and reloaded many times,
and memory traffic, not arithmetic, sets the energy and the speed. The
hardware convolution block (HWC) described here is a small accelerator that
sits beside a cluster's shared scratchpad (a tightly-coupled data memory,
TCDM). It has about 1.2 KB of its own storage and follows a fixed loop
schedule. The schedule is chosen so that every partial sum is finished
inside the accelerator before it leaves: an output pixel crosses the TCDM
port exactly once, already requantised. Inputs and weights are re-read
instead, and their reuse is taken from tiny row buffers.

This repository is a synthesizable SystemVerilog model of that engine. It
includes a self-checking testbench for every block, plus end-to-end tests
on layers of AlexNet, ZFNet and ResNet.

## The three buffers and what each one holds

| Buffer | Size | Holds | Reused across |
|---|---|---|---|
| I | 96 B | row segments of one input map, each the (lanes−1)·S+R pixels that 16 neighbouring output columns need for one kernel row: the whole window of (iss−1)·S+R segments of a tile when it fits ("window mode"), otherwise one segment per kernel row (two of up to 48 B when double-buffered) | all `mss` output maps and all R kernel columns; in window mode also all `iss` output lines |
| W | 128 B | kernel row k of input map c for each of the `mss` output maps of the tile (mss·R weights; two such sets when they fit 64 B) | all 16 output columns |
| O | 1 KB | 16 rows × 16 lanes × 32-bit partial sums: one row per (output map, output line) of the tile | all C input maps and all R×R kernel taps |

The O buffer is the important one. A tile is `mss` output maps × `iss` output
lines × 16 output columns, with `mss·iss ≤ 16`. All C input maps are added
into it before anything is written back. The input-map loop is never split.
That is what makes the output traffic minimal, and it is why the O buffer is
by far the largest of the three.

## The schedule

The controller (`hwc_ctrl`) runs this loop nest. The outer loops walk tiles;
the inner loops compute one tile.

```
for mm in 0, mss, 2·mss, ... < M                 output-map tile
  for yy in 0, iss, ... < E                      output-line tile
    for xx in 0, 16, 32, ... < E                 column tile = SIMD width
      for c in 0 .. C-1                          every input map (never tiled)
        for yl in 0 .. iss_eff-1                 output line y = yy+yl
          for k in 0 .. R-1                      kernel row
            load I: input row iy = y·S+k-PAD of map c, columns xx·S-PAD ...
            load W: W[mm+ml][c][k][0..R-1] for every ml of the tile
            for ml in 0 .. mss_eff-1             output map
              for l in 0 .. R-1                  kernel column
                one SIMD cycle: lane j += I[j·S+l] · W[ml][l]
              add the lane sums into O row (ml·iss_eff + yl)
      write the tile's O rows to memory, requantised
```

The two loads of a kernel row are issued one row ahead of the SIMD steps
that use them. When the rows fit free buffer space, they overlap the
previous row's SIMD steps (see "Timing" below).

In window mode, the I load moves up, above the output-line loop, as in the
published loop nest: at (yl, k) = (0, 0) all (iss−1)·S+R input rows of the
tile for input map c are loaded, and the later kernel rows load only W. The
controller picks window mode when the window fits the 96 B I buffer and has
fewer rows than the iss·R segment loads it replaces.

`mss_eff`, `iss_eff` and the number of valid columns shrink at the right and
bottom edges, so any E and M work; partial tiles are handled. The 16 lanes
compute 16 neighbouring output columns of the same output pixel row at once.
The weight is the same for all lanes and is broadcast.

Some cost figures, per tile:

- SIMD cycles: C · iss · R · mss · R. The MACCYC counter reports exactly this.
- Input words read: C · iss · R row segments, or C · ((iss−1)·S+R) in
  window mode.
- Weight words read: C · iss · R · mss kernel rows.
- Output words written: once per output pixel. This is the point of the
  schedule.

### Padding and the kernel centre

The kernel is indexed 0..R−1. The centred kernel of a "same" convolution
comes from the PAD register: input row `iy = y·S + k − PAD` and first column
`ix0 = xx·S − PAD`. Rows outside the map are skipped. The I buffer is zeroed
before each load, and only the in-range part of the segment is fetched, so
padding costs no memory traffic. For PAD = R/2 this is the usual centred
3×3, 5×5, … convolution.

### What the engine refuses

A start is rejected, with `err` set and `done` pulsed and no memory touched,
when any of these holds:

- the I segment ((lanes−1)·S+R)·bytes is over 96 B;
- mss·R·bytes is over 128 B;
- mss·iss is over 16 O rows;
- R is 0 or over 11;
- any size field is zero.

Within those limits H, E, C and M may be anything up to 65535. Software picks
`mss` and `iss` per layer. A reasonable choice is the largest `mss` that fits
W and O, then `iss = 16 / mss`.

## Datapath and precision

`hwc_datapath` has 16 lanes. Each lane has a signed 16×16 multiplier and a
32-bit accumulator, in two pipeline stages:

1. **Multiply-accumulate.** The product is added into the lane accumulator,
   which restarts on the first kernel column (`first`).
2. **O buffer update.** On the last kernel column (`last`), the accumulator is
   added into its O buffer row and written back. If this is the first
   contribution to the row (c = 0, k = 0; the `init` flag), the row is
   overwritten instead. This step is a read-modify-write of one 512-bit row.

Precision is set per layer:

- **8-bit mode:** 16 lanes, bytes sign-extended.
- **16-bit mode:** 8 lanes. Elements are two bytes, little-endian. Only 8
  columns per tile are used.

Sums are 32 bits and wrap around on overflow.

On the way out, `hwc_store_unit` requantises each sum. It shifts the sum
arithmetically right by the SHIFT register, then saturates it to the data
width: −128..127 or −32768..32767. This gives a dynamic fixed-point format:
software picks SHIFT per layer from the fractional bits of input, weight and
output.

## Memory layout

All arrays are dense and row-major, in units of one element (1 or 2 bytes):

```
I[c][iy][ix]      at I_BASE + ((c·H + iy)·H + ix)·eb          c<C, iy,ix<H
W[m][c][k][l]     at W_BASE + (((m·C + c)·R + k)·R + l)·eb    m<M, k,l<R
O[m][y][x]        at O_BASE + ((m·E + y)·E + x)·eb            y,x<E
```

No alignment is required. The load units fetch the aligned 32-bit words that
cover a byte range and keep only the wanted bytes. The store unit writes
aligned words with byte enables, so bytes next to the output are never
disturbed.

## Interfaces

The top module `hwc` has no parameters. Its ports are:

- `clk_i`, `rst_ni`: asynchronous active-low reset.
- `cfg_req_i` / `cfg_rsp_o`: configuration slave port. A request
  {req, we, addr[4:0] word index, wdata} is always accepted. Read data
  returns with `rvalid` one cycle later.
- `tcdm_i_*`, `tcdm_w_*`, `tcdm_o_*`: three 32-bit TCDM master ports, one per
  array. Request {req, we, be, addr, wdata} is held until `gnt` is high in
  the same cycle. Read data returns with `rvalid` exactly one cycle after the
  grant, as on a single-cycle shared-memory interconnect. The I and W ports
  only read; the O port only writes.
- `evt_o`: a one-cycle pulse when a layer ends (also on refusal).

Register map (32-bit registers at word addresses):

| Addr | Name | Meaning |
|---|---|---|
| 0 | CTRL | write bit0=1: start (ignored while busy). Read: {err, done, busy} |
| 1–3 | I_BASE, W_BASE, O_BASE | byte addresses of the arrays |
| 4–7 | H, E, C, M | input side, output side, input maps, output maps (16 bit) |
| 8–10 | R, S, PAD | kernel side (1..11), stride (1..7), zero padding per border |
| 11–12 | MSS, ISS | output maps and output lines per tile |
| 13 | PREC | bit0: 1 = 16-bit, 0 = 8-bit data |
| 14 | SHIFT | output right shift (0..31) |
| 16 | CYC | cycles busy in the last layer |
| 17 | MACCYC | SIMD cycles |
| 18–20 | IWORDS, WWORDS, OWORDS | words moved on each TCDM port |

Other notes on the registers:

- All configuration writes are ignored while the engine is busy.
- `done` and `err` stay set until the next start.
- The counters are cleared by start. They give the TCDM traffic directly.

## Blocks

| File | Block |
|---|---|
| `rtl/hwc_pkg.sv` | sizes, bus structs, register map |
| `rtl/hwc_regs.sv` | register file, start/status, counters |
| `rtl/hwc_ctrl.sv` | loop-nest sequencer, address generation, shape check |
| `rtl/hwc_load_unit.sv` | TCDM→buffer byte-range copier (two instances: I and W) |
| `rtl/hwc_ibuf.sv` | 96 B I buffer with strided lane gather |
| `rtl/hwc_wbuf.sv` | 128 B W buffer, broadcast weight read |
| `rtl/hwc_obuf.sv` | 1 KB O buffer, one write and two read ports |
| `rtl/hwc_datapath.sv` | 16-lane SIMD MAC and O update |
| `rtl/hwc_store_unit.sv` | requantise and write the finished tile |
| `rtl/hwc.sv` | top |
| `tb/tcdm_model.sv` | behavioural shared memory with three ports and random grant stalls (not synthesizable) |

### Timing of one kernel row, and double buffering

Loading a kernel row works as follows:

1. If the row needs I, the controller's load engine clears the target part
   of I and issues the I command (one segment, or every window row in
   window mode).
2. On the other port, in parallel, it issues the `mss` W commands back to
   back.
3. The row is loaded once both load units are idle. A load unit requests one
   word per cycle and accepts its next command while the last word is still
   in flight.

Computing a loaded row takes mss·R SIMD steps, one per cycle.

The load engine keeps its own position (input map, output line, kernel row).
That position runs one kernel row ahead of the position being computed.
Whether loads overlap computing depends on the layer:

- **Double-buffered layers.** The mss W rows fit half the W buffer (at
  most 64 B), and the next row's I either fits half the I buffer (at most
  48 B) or is not needed because the window is already loaded. Each
  buffer is then used as two halves. The next kernel row is loaded into one
  half while the datapath reads the other, and the halves swap at each
  kernel row. When a load takes no longer than the mss·R SIMD steps, the
  SIMD unit runs without gaps. Typical 3×3 and 1×1 layers work this way.
  In window mode the window load at the start of each input map cannot
  overlap, because the window occupies the whole I buffer.
- **Single-buffered layers.** Examples are 11×11 stride 4, or a large
  mss·R. Loading and computing alternate, and a kernel row costs about
  max(I words, W words) + 4 + mss·R cycles.

At the end of a tile the controller waits for the pipeline to drain. The
store unit then writes ⌈row bytes / 4⌉ words per O row (one more if the row
is unaligned). Stores are not overlapped with the next tile's work.

## Measured on real layers

`tb/tb_hwc_layers.sv` runs full-size layers with random data, with a TCDM
that refuses a request now and then. It checks every output byte against a
reference convolution in the testbench.

| Layer | Shape | mss, iss | Buffering | Cycles | SIMD busy |
|---|---|---|---|---|---|
| ZFNet conv6 | 6×6, 256→256, 3×3, pad 1 | 8, 2 | window, W double | 4.52 M | 78 % |
| AlexNet conv1 | 224×224 → 55×55, 3→96, 11×11, stride 4, pad 2 | 11, 1 | single | 11.46 M | 66 % |
| ResNet stage 3 1×1 | 28×28, 256→128, 1×1 | 16, 1 | double | 4.38 M | 41 % |
| AlexNet conv3 | 27×27 → 13×13, 256→384, 3×3, stride 2 | 8, 2 | double | 12.92 M | 88 % |
| ZFNet conv6, 16-bit data | as above, 8 lanes | 6, 2 | window, W double | 5.22 M | 67 % |

Window mode trades time for traffic. Before it was added, the ZFNet layer
ran double-buffered in 3.97 M cycles (89 %). Window mode reads fewer I
words (163,840 in this run) but its window load at the start of each input
map cannot overlap the SIMD steps.

In the ResNet layer each kernel row has only 16 SIMD steps but needs 16
one-byte W loads. W loading is then the bottleneck. Utilisation grows with
mss·R, i.e. with the number of SIMD cycles per loaded row.

The layers in the published evaluation also fit the buffers:

- AlexNet: the worst case is 11×11 stride 4, which needs a 71-byte I segment.
- ZFNet, VGG-16 and ResNet: 3×3, 7×7 stride 2 and 1×1 kernels.
- Inception-v3: the square kernels fit. The 1×7 and 7×1 kernels do not,
  because only square kernels are supported.

## Where this model departs from the published design, and why

- **Hand-written RTL.** The original engine was produced by high-level
  synthesis from C, and its RTL was not published. The block split (registers
  and control, I/W load units, store unit, SIMD datapath, three buffers) and
  the buffer sizes follow the published block diagram. Everything below that
  level is this design's own: bus protocols, register map, pipeline,
  requantisation rule, memory layout and padding. Treat it as one faithful
  realisation of the schedule, not as the original netlist.
- **How loads are hidden.** The published engine reaches about 80 % average
  utilisation, but how it hides load time is not described. This model
  splits the published buffer sizes into halves when a layer's rows fit,
  and gets 78–88 % on 3×3 layers. It falls back to alternating loads and
  computing otherwise: 66 % on 11×11 stride 4, and 41 % on a 1×1 layer
  limited by W traffic.
- **I holds a full window only when it fits.** The published loop nest
  marks the input buffer above the output-line loop, which needs
  (iss−1)·S+R row segments: up to 781 B for 11×11 stride 4, far more than
  96 B. This model follows the loop nest (window mode) when the window fits
  96 B and saves loads, e.g. 4 row fetches instead of 6 for a 3×3 stride-1
  layer with 2 lines per tile. Otherwise it keeps the 96 B size and reloads
  one segment per kernel row, so an input row is fetched once for each
  (output line, kernel row) pair that uses it.
- **Which tile equals the SIMD width.** One sentence of the published text
  ties the SIMD width to the tile of the input-map loop. The published loop
  nest instead gives that role to the output-column tile, and a SIMD unit
  over output columns only makes sense that way. This model follows the loop
  nest: 16 (or 8) output columns per tile, and the input-map loop is never
  tiled.
- **Kernel loops** run 0..R−1 with a PAD register, not −R/2..R/2. The
  output-map loop bound is min(mm+mss, M).
- **One multiplier type for both precisions.** 16×16 multipliers serve both
  modes, rather than multipliers split into 8-bit halves. In 16-bit mode, half
  of each O row is unused.
- **Only square R×R kernels, square maps** (H×H, E×E), and one stride for
  both axes. This is what the published loop nest describes.
- **Single engine only.** The published system puts four HWCs in a cluster
  with cores, DMA and a banked TCDM. Those parts are not modelled. Connect
  each HWC's three ports to the cluster interconnect, and `evt_o` to its
  event unit.

## Simulating

Each testbench is self-checking. It ends by printing
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/hwc_pkg.sv $(ls rtl/*.sv | grep -v hwc_pkg) tb/tcdm_model.sv tb/tb_hwc.sv \
    --top-module tb_hwc
./obj_dir/Vtb_hwc
```

The package has to come first. Block testbenches that need no memory model
leave out `tb/tcdm_model.sv`. The testbenches:

| Testbench | What it covers | Time |
|---|---|---|
| `tb_hwc` | the top at default parameters: six layers covering 8- and 16-bit data, strides 1, 2 and 4, kernels 1×1 to 11×11, padding, partial tiles, saturation, TCDM stalls, double- and single-buffered layers, window mode, and a seventh, refused shape. It checks every output byte, the guard bytes after the output, the SIMD-cycle and word counters, and that loads overlap SIMD steps exactly when the layer is double-buffered. | about 2 s |
| `tb_hwc_layers` | the full-size CNN layers above | about a minute |
| `tb_hwc_<block>` | each block alone against an independent model | seconds |

To change the engine's size, edit the constants in `rtl/hwc_pkg.sv`:

- `LANES`;
- the three buffer sizes (`IBUF_BYTES`, `WBUF_BYTES`, `OBUF_BYTES`);
- `ACC_W` and `R_MAX`.

Every block takes its parameters from them. The shape check in the controller
follows automatically. The register field widths (16-bit sizes, 4-bit R,
3-bit S) are fixed in `layer_cfg_t`.
