# TinBiNN overlay in SystemVerilog

TinBiNN runs a small convolutional neural network with 1-bit weights and
8-bit activations on a very small FPGA (an iCE40 UltraPlus with about
5,000 4-input LUTs). There is no large array of multipliers. A RISC-V
soft CPU gets a vector unit that streams operands out of a scratchpad
memory. Three custom ALUs are added to that stream:

* a binarized convolution unit. Each cycle it takes one 8-byte row of an
  input map and adds two 3x3 convolutions. Each product is `+x` or `-x`,
  so no multiplier is needed;
* a "quad-16b to 32b" add, which widens 16-bit partial sums into 32-bit
  sums;
* a 32-bit to 8-bit activation (ReLU, scale, clamp).

Weights come from an SPI flash through a DMA engine. Images come from a
VGA camera through a 16 x 16 downscaler and a second DMA engine. All of
these share one 128 kB scratchpad. The RAM is single-ported, but it runs
at three times the CPU clock, so each CPU cycle gets two reads and one
write.

This RTL follows the design described by Lemieux et al., "TinBiNN: Tiny
Binarized Neural Network Overlay in about 5,000 4-LUTs and 5mW". That
description stops at block diagrams and a few sentences. Everything it
leaves open has been filled in here and is listed in
[Choices made here](#choices-made-here). The RISC-V CPU itself is not
included. Its command interfaces are ports of the top module.

```
            camera pixels                       SPI flash pins
                 |                                    |
          +-------------+                       +-----------+
          | downscale16 |  640x480 -> 40x30     |  spi_dma  |<-- CPU command
          +-------------+                       +-----------+
                 |                                    |
          +-------------+                             |
          |   rgb_dma   |                             |
          +-------------+                             |
                 |   write slot: rgb > spi > lve > host
                 v                                    v
      +---------------------------------------------------------+
      | scratchpad 128 kB, 72 MHz: read A | read B | write      |
      +---------------------------------------------------------+
             ^ read A, read B        | write
             |                       |
      +----------------------------------------+
      | lve: address streams + ALU / cvi_conv / |<-- CPU command
      |      simd_add16to32 / act32to8          |
      +----------------------------------------+
      i2c_master <-- CPU command, pins to camera
```

## The convolution unit (`cvi_conv`)

This is the part of the design worth understanding first. The input map
is stored row by row, one byte per activation. The vector unit walks
**down one column of the map**. Each cycle it delivers 8 consecutive
bytes of one row as two 32-bit operands: bytes 0..3 in `src_a` and bytes
4..7 in `src_b`.

Two 3-byte windows are cut out of those 8 bytes. `sel23` selects which
ones:

| `sel23` | low convolution (`dst[15:0]`) | high convolution (`dst[31:16]`) |
|---------|-------------------------------|---------------------------------|
| 0       | bytes 0,1,2 (offset 0)        | bytes 1,2,3 (offset 1)          |
| 1       | bytes 2,3,4 (offset 2)        | bytes 3,4,5 (offset 3)          |

Each window enters its own three-deep shift register (`row2 -> row1 ->
row0`). So the registers always hold the last three rows of the column,
a 3x3 patch. The nine weight bits are shared by both convolutions. Each
weight bit either negates its byte or leaves it as it is. An adder tree
then sums the nine values into a 16-bit signed result. Bit `3*r + c` is
the weight for row `r` of the patch (row 0 is the oldest, i.e. the top
row) and byte `c` of the window. A 1 means +1 and a 0 means -1.

An input column 8 bytes wide therefore needs two passes. The first pass
(`sel23=0`) gives outputs 0 and 1. The second pass (`sel23=1`) gives
outputs 2 and 3. The next column group starts 4 bytes further on, so
every read stays 32-bit aligned. A column of `N` rows gives `N-2` result
words. The first result is valid one cycle after the third row was
accepted.

Example: a 32 x 32 output map from a 40-byte-wide, 34-row input plane
with a 40-byte row pitch. Output column `j` uses input columns `j+4 ..
j+6`. This takes 16 commands, `g = 1..8` and `p = 0,1`:

```
op = OP_CVI, sel23 = p, len = 34
src_a = in + 4g,      stride_a = 40
src_b = in + 4g + 4,  stride_b = 40
dst   = out + 2*(4(g-1) + 2p), stride_d = 64     // 16-bit results, 64 B rows
```

Each command takes 34 CPU cycles plus 3 cycles of pipeline. In total
that is 16 x 37 cycles for 1,024 results, with 9 additions each.

Range: one convolution lies in -2295..+2295. If sixteen of them are
added in 16 bits, as the source design does before widening to 32 bits,
the worst case is ±36,720. That exceeds the 16-bit signed range. Real
activations stay far from the worst case, but software must not rely on
this.

## The scratchpad and the CPU clock (`scratchpad`)

There is one RAM array, with one access per cycle of `clk` (72 MHz). A
phase counter gives every CPU cycle three slots:

| phase | access            |
|-------|-------------------|
| 0     | read port A       |
| 1     | read port B       |
| 2     | the single write  |

`tick` is high in phase 2. It is the clock enable of all logic that runs
at the CPU rate (24 MHz). So there is only one clock in the design, and
CPU-rate registers change once every three `clk` cycles. Reads behave
like a synchronous RAM: the address goes out in CPU cycle *n* and the
data is there in cycle *n+1*. A write in cycle *n* is not visible to
the reads of cycle *n*. If `rd_en` is low at the tick, the read outputs
keep their value. The vector unit uses this when it stalls.

In the FPGA, the 128 kB are the four 32 kB SPRAM blocks of the device.
Here it is one `logic [31:0] mem [32768]` with byte enables.

## The vector unit (`lve`)

In the source design the vector unit is proprietary. Only what it does
is described. This implementation keeps that behaviour and stays small.

One command, `lve_cmd_t` in `tinbinn_pkg`, describes:

* three byte-address streams (A, B, destination), each with a base
  address and a byte stride;
* the element count `len`;
* the operation;
* the convolution weights and `sel23`;
* the activation shift.

Operations:

* `OP_ADD`, `OP_SUB`, `OP_AND`, `OP_OR`, `OP_XOR`, `OP_SLT`, `OP_SLTU`,
  `OP_SLL`, `OP_SRL`, `OP_SRA`: the RV32I ALU;
* `OP_CVI`: the convolution unit. It writes `len-2` results.
* `OP_QADD`: `simd_add16to32`. It sign-extends the four 16-bit lanes of
  A and B and adds them into one 32-bit result.
* `OP_ACT`: `act32to8` applied to A. It writes a single byte at the
  destination byte address, so `stride_d = 1` packs activations densely.

The pipeline has three stages, all enabled by `ce`:

```
cycle k    issue : A and B word addresses of element k go to the scratchpad
cycle k+1  exec  : operands arrive; result registered (CVI: rows shift)
cycle k+2  write : result requests the write slot
```

Without interference, a command of `len` elements is done in at most
`len + 3` CPU cycles. If the write slot goes to a DMA engine, the whole
pipeline freezes for that cycle. Its addresses stay the same, and
`rd_en` goes low so the operands already read are kept. Nothing is lost
or repeated.

## Widening and activation

`simd_add16to32` is combinational: `dst = sext(a[15:0]) + sext(a[31:16])
+ sext(b[15:0]) + sext(b[31:16])`. The source design names this
operation and says why it exists. It does not say how the lanes are
arranged, so this arrangement is one reading of it.

`act32to8` gives 0 for a negative input (ReLU). Otherwise it gives
`min(255, x >> shift)`.

## Getting pictures and weights in

**`downscale16`** takes the 640 x 480 RGB565 stream, one pixel per
`pix_valid`, with `frame_start` on the first pixel. It widens each colour
to 8 bits by repeating its top bits. Each colour of each 16 x 16 block
is summed in one of 40 per-column accumulators, which are reused for
every band of 16 lines. The block's average (sum / 256) goes out as one
RGBA word: R in bits 7:0, G in 15:8, B in 23:16, and 0 in 31:24. The
result is 40 x 30 pixels, at most one per 16 input pixels.

**`rgb_dma`** queues these pixels in a 4-entry FIFO. It writes them to
consecutive words from `base`, restarting at `base` with every frame.
Software later splits the RGBA words into three colour planes padded
with black to 40 x 34. The convolutions then cover the 32 x 32 centre.

**`spi_dma`** sends READ (0x03) and a 24-bit address to the flash in SPI
mode 0, with SCLK at half the CPU clock. It then packs every four bytes
into one little-endian word at consecutive scratchpad addresses. While
a word waits for the write slot, SCLK stops. The cost is 64 CPU cycles
of header plus 65 cycles per word.

**`i2c_master`** performs single register writes to the camera: START,
address+W, register, data, STOP, with a check of each ACK. SCL is
`DIV`-scaled (100 kHz at the default).

The write slot is given by `spad_wr_arbiter` with fixed priority:

1. camera DMA (the camera cannot wait);
2. SPI DMA (it can pause SCLK);
3. vector unit (it stalls);
4. CPU stores.

## The top module (`tinbinn_top`)

Parameters: `CAM_W = 640`, `CAM_H = 480`, `I2C_DIV = 60`.

Everything runs on `clk`. All command inputs are sampled at a clock edge
where `cpu_tick` is high. Drive them just after such an edge and hold
them for the whole CPU cycle.

* **Vector unit**: hold `lve_start` and `lve_cmd` for one CPU cycle.
  Then wait for `lve_busy` to drop, or for the `lve_done` pulse.
* **SPI DMA, I2C**: the same pattern with `spi_*` and `i2c_*`. `i2c_nack`
  reports a missing acknowledge.
* **RGB DMA**: `rgb_enable` and `rgb_base` are levels. `rgb_frame_done`
  pulses when a frame is complete, and `rgb_frames` counts frames.
* **Host port** (CPU loads and stores, word addresses): raise
  `host_req`, with `host_we` for a store, and hold everything until
  `host_gnt` is high at a tick. Read data is on `host_rdata` during the
  next CPU cycle. Loads are granted only while the vector unit is idle,
  because they share its read port A.

A convolution layer is run by the CPU roughly like this:

1. start the SPI DMA of the layer's weights;
2. for every output map and every input map, issue the 16 column passes;
3. widen each 16-bit result to a 32-bit value per position (below);
4. add the 32-bit maps of all input maps with `OP_ADD`;
5. apply `OP_ACT`.

The source design instead adds the 16-bit results of up to 16 input
maps first, then folds them into 32-bit sums with its quad-16b to 32b
add. Here that path is not available. This vector unit has no 16-bit
lane add. Also, the reading of the quad add used here (all four lanes
into one sum) mixes neighbouring positions, so step 3 uses shifts.
The 2 x 2 max-pool has no operation of its own either. It can be built
from the ALU operations on the 32-bit sums, before step 5. Pooling
first gives the same bytes, because the activation never decreases.
The maximum of two streams `a` and `b` takes five passes:

* `t = SLT(a, b)`;
* `t = SUB(0, t)`, with the zero read from one word at stride 0, so `t`
  is all ones where `b` is larger;
* `x = XOR(a, b)`;
* `x = AND(x, t)`;
* `max = XOR(a, x)`.

Horizontal pairs are the even and odd positions, read at stride 8. That
is one group of five passes over the whole map. Vertical pairs are
adjacent rows, which takes one group per output row. `tb_conv_layers`
pools this way.

The dense layers are left to software. The source does not say which
vector operations it uses for them, and a sum across a vector is not
among the operations here.

The per-position widening can be built from the shift operations. A
result word holds position `2i` in its low lane and `2i+1` in its high
lane. Then:

* `SRA(SLL(w, 16), 16)` gives position `2i` as a 32-bit value. Write it
  with `stride_d = 8`.
* `SRA(w, 16)` gives position `2i+1`. Write it at an offset of 4 bytes,
  also with stride 8.

The shift amount comes from a B stream of stride 0 that points at a
word holding 16. `tb_conv_layers` runs two whole layers this way.

## Does the network fit?

The 10-category network is
`(2x48C3)-MP2-(2x96C3)-MP2-(2x128C3)-MP2-(2x256FC)-10SVM`. The layer
sizes are from the source design; the byte counts below are estimates
for this implementation.

* **Scratchpad.** The largest working set is the second 48-map layer:
  - 48 padded 34 x 40 input planes: 65,280 B;
  - 48 output maps of 32 x 32: 49,152 B;
  - two partial-sum maps: about 6 kB.

  The total, about 120.6 kB, fits in the 128 kB scratchpad.
* **Weights.** The binary weights total 996,880 bits, about 125 kB
  packed; the source quotes about 270 kB as stored. They stay in the
  flash and are copied in per layer.
* **Time.** The convolution passes alone take about 4.5 M CPU cycles,
  which is 186 ms at 24 MHz. The measured 1.3 s of the original system
  also includes software and dense layers.

The sizes of the smaller 1-category network are not published.

## Choices made here

These points are not fixed by the source description. Each file's header
comment says the same for its own module.

* **Convolution unit.** Weight bit order and polarity. The row-register
  order (newest row in `row2`). The `clear`/warm-up handshake.
* **Quad add.** The lane arrangement of the quad-16b to 32b add.
* **Activation.** The scaling (shift, then clamp) of the activation. No
  bias term.
* **Scratchpad.** Slot order, read-before-write, and the hold input.
  The CPU clock is a clock enable, not a second clock.
* **Vector unit.** The whole command format, the pipeline and the stall
  rule. Only the RV32I ALU operations are provided; the original unit's
  further features are unknown.
* **Sharing the scratchpad.** The write priority and the host-port
  protocol.
* **SPI DMA.** The flash command, SPI mode and rate, byte order, and
  the pause while waiting.
* **RGB DMA control.** The system diagram shows no CPU connection to
  the RGB DMA; its `enable` and `base` inputs are additions.
* **Camera path.** Block averaging (rather than subsampling), the
  colour widening, RGBA byte order with A = 0, and the camera interface
  timing. The FIFO depth of the RGB DMA.
* **I2C.** Write-only single-register transfers at 100 kHz. There is
  nothing about the I2C master in the source text beyond its place in
  the system diagram.

Not included: the RISC-V CPU, the flash chip and the camera. The test
benches contain behavioural models of the flash (`spi_flash_model`),
the camera pixel stream (`cam_model`) and the camera's I2C registers
(`i2c_target_model`).

## Simulation

Each module has a self-checking testbench in `tb/`. Each ends by
printing `TB_RESULT checks=N failures=M`.

| testbench            | what it checks |
|----------------------|----------------|
| `tb_cvi_conv`        | 40 random columns, both passes, against a direct 3x3 convolution; result timing and `N-2` count |
| `tb_simd_add16to32`  | random and extreme lanes |
| `tb_act32to8`        | ReLU, shift, clamp for all shifts |
| `tb_scratchpad`      | random traffic against a reference array, read latency, read-before-write, hold, tick every 3 cycles |
| `tb_lve`             | every operation on random data, CVI passes, byte-wide activation writes, random write-slot refusals (stalls), `len+3` cycle bound |
| `tb_spi_dma`         | words, addresses and byte order against the flash model, refused grants, exact cycle count |
| `tb_downscale16`     | two full frames against 16 x 16 block averages |
| `tb_rgb_dma`         | order, addresses, frame restart, refused grants, FIFO overflow |
| `tb_i2c_master`      | register writes into the target model, ACK/NACK, exact transfer time |
| `tb_tinbinn_top`     | whole system at default sizes (see below) |

`tb_tinbinn_top` acts as the CPU:

1. configures the camera over I2C;
2. loads a random 40 x 34 plane;
3. starts a full 640 x 480 camera frame and a 256-word weight DMA;
4. while both DMAs run, computes the full 32 x 32 convolution with 16
   passes, then the quad add and the activation on all results;
5. checks every value, then checks the 1,200 captured pixels and the 256
   weight words.

It also counts vector-unit stalls, both pass types, DMA overlap, ReLU
and saturation cases, and ACK/NACK, and it fails if any of these never
happens. It runs in a few seconds.

`tb_conv_layers` runs the network's first stage (two convolution
layers and a max-pool) in full, on the default-size system:

* a captured 640 x 480 frame is split into three padded planes;
* 144 kernels are loaded from flash;
* layer 1 computes 48 output maps of 32 x 32 with 2,880 vector commands
  (convolution passes, widening, accumulation, activation);
* its 48 maps are padded and laid out again, filling most of the
  scratchpad (about 127 kB in use);
* layer 2 computes 48 more maps from those 48, summing 48 input maps per
  output with 46,080 vector commands. The 48 kernels of the next output
  map arrive by SPI DMA into a second buffer while the current one runs;
* each layer-2 map is max-pooled 2 x 2 to 16 x 16, as the network's
  first stage ends (4,128 more vector commands);
* every activation of both layers (98,304) and every pooled byte
  (12,288) is compared with a direct computation;
* it prints the CPU cycles spent in vector commands. Layer 2 with its
  pooling takes 7.55 M cycles, about 314 ms at 24 MHz. Of that, the
  convolution passes are only about 1.4 M. Widening with shifts and
  adding 32-bit maps take most of the rest, which is the cost that the
  source design's 16-bit accumulation avoids.

It takes about half a minute of simulation.

To run one, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_tinbinn_top rtl/tinbinn_pkg.sv tb/tb_tinbinn_top.sv
./obj_dir/Vtb_tinbinn_top
```

Simulate with `+verilator+rand+reset+2` to start from random register
contents. All state that is read is reset.
