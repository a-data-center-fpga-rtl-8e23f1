# A CNN accelerator built from supertile units

This RTL is the accelerator part of a data-center FPGA card for CNN inference.
The design's main idea is the **supertile unit (SU)**. An SU is a 32 × 16 array
of multiply-accumulate elements. The same input activation is broadcast along
each row, and the products are summed up each column through the multiplier
cascade.

- Each row holds one input channel. The 32 rows therefore cover one *slice*
  of 32 input channels.
- Each column holds the weights of two kernels. The 16 columns therefore give
  32 output channels per sliding window.
- The arithmetic is 16-bit fixed point, with a 48-bit accumulator (the width
  of an FPGA DSP cascade).

An **engine** is four SUs that share one input buffer, one kernel stream and
one set of control. It also has an operator-fusion stage, an output buffer
per SU, a filter processing unit (FPU) for pooling-like work, and a command
processor. The top level `accel_top` holds two engines, one per FPGA die:

- 8 SUs and 4096 multipliers in all;
- 2 multiplies per multiplier per clock;
- about 4.1 TOP/s at a 250 MHz logic clock.

Everything runs in one clock domain. The host, DMA, DDR and LRN side is not
part of this RTL. Its connection points are top-level ports.

```
             cmd ──► cmd_fifo ──► cmd_ctrl ─┬─► slice_loop_ctl ─┬─► ib_dispatcher
                                            │                    └─► 4 × broadcast_cache
  kernel stream ──► kernel_load_ctl ─────────┼──────────────► 4 × su (weights)
                                            ├─► fpu (ucmd)
                                            └─► assemble_reader
  IB (4096 × 512 b) ─► ib_dispatcher ─► BC0..BC3 ─► SU0..SU3 ─► postproc0..3 ─► OB set 0..3
        ▲                                                                        │  │
        └──────────────────────── assemble_reader ◄─────────────────────────────┘  │
                                   fpu (reads/writes OB sets, port B) ◄──────────────┘
```

## How a convolution flows through an engine

### Slices and the slice loop

A conv command names these:

- an input tile of `h × w` pixels;
- `slices` groups of 32 input channels;
- a kernel of `kx × ky` with its stride and padding;
- a *fusion count* `Fu`, explained in the next section.

Each IB word (512 bits) holds the 32 channels of one pixel of one slice.
Slice `s`, pixel `(y, x)` is at IB word `ib_base + s*h*w + y*w + x`.

`slice_loop_ctl` runs the input slices one after another on its own. For each
slice it does these steps in order:

1. Waits until that slice's weights are in the EPE caches.
2. Starts the dispatcher and the four broadcast caches.
3. Waits until all windows are issued.
4. Lets the SU and fusion pipeline drain.
5. Moves to the next slice.

The partial sum of slices `0..s-1` is kept in the output buffer (OB) as a
32-bit *temporary result*. The fusion stage reads it back and adds the new
slice. Only the last slice is activated, quantised and stored as 16-bit
output.

### Weight caches, ping-pong and kernel fusion

Each EPE (`epe.sv`) has two weight caches. Each cache has two 16-deep buffers,
one for each of the two kernels the EPE serves.

- Slice `s` uses cache `s mod 2`.
- `kernel_load_ctl` writes slice `s+1` into the idle cache while slice `s`
  computes. This is the "weight preload".
- It may start slice `s` only after slice `s-2` has finished. That rule is
  the whole interlock.

The 16 entries of a buffer hold one kernel's `kx*ky` weights for one input
channel. When a kernel is small, an EPE can hold several kernels. **Kernel
fusion** places `Fu` kernels (`Fu*kx*ky ≤ 16`) in each buffer. Each window is
then computed `Fu` times with different weight addresses, so one slice
produces `Fu × 32` output channels. For example, a 1×1 conv with `Fu = 16`
yields 512 output channels from one pass over the input.

Kernel words arrive on a 512-bit valid/ready stream. Value `r` of a word goes
to EPE row `r`. The order within a command is:

1. `Fu` bias words, if `bias_en` is set. Lane `l` of word `f` is the bias of
   output channel `32f + l`.
2. For each slice, for each column `j`, for each buffer `b` (A, B), for each
   address `a < Fu*kx*ky`: one word.

Output channel numbering: column `j`, buffer `b` and fused kernel `f` produce
channel `32f + 16b + j`.

### Interleaved windows and the broadcast caches

The four SUs of an engine do not split the output channels. They split the
windows: output column `x` is computed by SU `x mod 4`.

All four broadcast-cache (BC) sets receive the same IB stream. One pixel word
is broadcast to all four each cycle. Each BC then walks only its own windows,
stepping `4 × stride` input columns at a time. For each window and each fused
kernel, the BC emits the `kx*ky` window elements one per cycle. Each element
carries its weight address and first/last flags.

The BC is a circular buffer of 8 input rows, each up to 64 pixels wide:

- row `y` lives in slot `y mod 8`;
- a window is read only when all of its rows are present;
- `free_row` reports the oldest row still needed.

`ib_dispatcher` sends row `y` only while `y < min(free_row) + 8` over the four
BCs. If a tile is taller than the cache, the dispatcher stalls until the
slowest SU has moved on. Pixels outside the tile (padding) are emitted as zero
without being stored.

### Inside the SU: timing

The column sum passes through 32 registered EPEs, so the input of row `r` is
delayed `r` cycles (systolic skew). An accumulator at the top of each column
adds the column sums of all the elements of a window.

- One window element enters per clock.
- A window's two 32-lane results appear 32 cycles (M cycles) after its last
  element.
- They come with side information: fused kernel index, output row and output
  column, plus the slice flags.
- One engine keeps 4 × 512 multipliers busy. Each does 2 products per cycle,
  except during the drain between slices.

### Operator fusion (`postproc.sv`)

Behind each SU, four stages act on 32 lanes:

1. **Temporary result or bias.** On slices after the first, add the stored
   temporary result. On the first slice, add the bias if it is enabled.
2. **Branch add.** Add a branch tensor of the same shape from the same OB
   bank, used for residual connections.
3. **ReLU.**
4. **Quantisation.** Shift right by `shift`, rounding to nearest, and
   saturate to 16 bits. This is dynamic precision: the shift is chosen per
   layer by software.

Stages 2 to 4 act only on the last slice. Bias and branch values are 16-bit
numbers in the output format, so they are shifted left by `shift` before the
add. The OB read is issued with the SU result and the write follows two
cycles later.

## Buffers and data layout

- **IB** (`input_buffer.sv`): 4096 words of 512 bits, with one read port and
  one write port. Read data arrive one cycle after the request. The host port
  shares the IB with the engine, and the engine has priority (`*_ready`
  shows when the host access was taken).
- **OB sets** (`ob_set.sv`): one per SU. Each set has two ping-pong banks of
  1024 words × 32 lanes × 32 bits.
  - Port A serves the fusion stage: two reads (temporary result, branch) and
    one write.
  - Port B is shared by the FPU, the assemble reader and the external LRN
    port, in that priority order.
  - Pixel `(y, x)` of channel group `g` of an `h × w` tensor at `base` is in
    set `x mod 4`, at word `base + g*h*ceil(w/4) + y*ceil(w/4) + x/4`. The
    function is `cnn_pkg::ob_addr`.
- **Assemble reader** (`assemble_reader.sv`): after a layer, it gathers the
  interleaved OB sets back into IB order, one pixel per cycle. This makes the
  output of one layer the input of the next without leaving the chip.

## Filter processing unit (`fpu.sv`, `fpu_alu.sv`)

The FPU runs 2-D operators that have no cross-channel sum:

- max and average pooling;
- relu and relu6;
- scale and offset;
- 3×3 (up to 7×7) depthwise convolution.

Its parts are:

- a micro-command queue;
- a decoder;
- its own loop over channel groups of 32;
- a kernel buffer (256 words) for depthwise weights;
- an address generator that reads each window element from OB set `ix mod 4`;
- 32 SIMD lanes.

Each lane is a three-stage pipeline:

1. **Pre-multiplier.** Multiplies by a scalar or by the per-lane kernel
   weight.
2. **Adder or comparator.** Accumulates over the window, or keeps the
   maximum. It starts from a programmable value (bias, or the minimum for
   max).
3. **Final multiplier.** Multiplies, then shifts right with rounding, and
   clamps to `[-32768, clamp_hi]`.

The switches come from the command's `FuncSet`. Average pooling is the
window sum times `post_s` (e.g. 1/4 in Q-format) and a shift. The result goes
to the destination bank and base in OB layout. One window element is handled
per cycle.

The FPU works on OB port B, so it can run while the next convolution uses
port A. The FPU must then read the bank the convolution is not writing.

## Commands

`cmd_t` = `{op, sync, payload}`. The ops are `CMD_CONV`, `CMD_FPU`,
`CMD_ASM` and `CMD_NOP`. The fields are in `cnn_pkg.sv`.

`cmd_ctrl` issues the head of the command FIFO when its unit is free:

- `CONV` needs the slice loop and the kernel loader to be idle.
- `FPU` needs the FPU queue to have room and no assembling to be in
  progress.
- `ASM` needs both the FPU and the assembler to be idle.
- `sync = 1` makes a command wait until every unit is idle. Software uses it
  for data dependencies, for example pooling the output of the conv just
  issued.

Commands without `sync` overlap. For example, an FPU pool on bank 1 can run
during a conv into bank 0.

## Where this RTL departs from the design it follows

- **Clocking.** The original double-pumps the DSPs (two multiplies per DSP
  per logic clock at twice the frequency). Here each EPE computes both
  products in the same clock. Throughput per logic clock is the same.
- **Command set.** The command set, field widths and kernel word order are
  this design's own. The original names the units but gives no encodings.
- **Buffer sizes.** The IB (4096), OB (1024 per bank), BC (8 × 64) and FPU
  kernel buffer (256) depths were chosen here. Tiles larger than these must
  be cut by software.
- **First-layer mapping.** Not built. In the original, a layer with few input
  channels (e.g. 7×7×3) is mapped by spreading one window over several EPE
  rows. The same effect can be had with host-side data layout: store each IB
  pixel word as 7 rows × 3 channels (21 channels), then run the layer as a
  1×7 kernel (`kx = 7`, `ky = 1`).
- **Large kernels.** Kernels with more than 16 weights (5×5, 7×7, 11×11) do
  not fit one pass, so AlexNet's and GoogLeNet's large layers cannot run
  as-is.
- **Drain between slices.** The slice loop drains the pipeline between
  slices (40 cycles) instead of overlapping slices, so that the
  temporary-result read-modify-write never races.
- **Not built.** The LRN unit, PCIe DMA, DDR4 controller, AXI connector,
  program updater and shell are outside this RTL. The LRN's OB access and
  the DMA's IB, kernel and command ports are top-level ports.
- **Overflow.** Temporary results saturate to 32 bits. This is a choice of
  this design.

## Verification and simulation

Each block has a self-checking testbench in `tb/` that compares against a
reference model computed in the testbench. Each prints
`TB_RESULT checks=N failures=M`.

`accel_top_tb` runs both engines at full size:

- **Engine 0:** a two-slice 3×3 padded conv with bias and relu, on a tile
  taller than the BC. Then a max-pool on the FPU. Then assembling and
  read-back.
- **Engine 1:** an average pool that overlaps a fused 1×1 conv with a branch
  add. Then a depthwise conv. Then assembling.

It counts each mechanism and fails if one never occurs. It compares about
7000 values.

Simulate with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal rtl/cnn_pkg.sv rtl/*.sv tb/su_tb.sv --top-module su_tb
./obj_dir/Vsu_tb
```

(`cnn_pkg.sv` must come first. Listing it twice is harmless.) The full-size
`accel_top_tb` takes a few minutes to compile and under a second to run.
Smaller testbenches override parameters (`M`, `N`, depths) in their
instantiations. The datapath is parameterised by `M`, `N`, depths, `BC_ROWS`
and `BC_COLS`. The 16-bit data width and 32-lane OB words are fixed in
`cnn_pkg`.
