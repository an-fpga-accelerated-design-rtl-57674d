# A tiled 16-bit convolution accelerator for SSD pedestrian detection

This is synthesizable SystemVerilog for the FPGA side of the pedestrian detector
proposed in "An FPGA-Accelerated Design for Deep Learning Pedestrian Detection in
Self-Driving Vehicles" (Moussawi, Haddad, Chahine). The detector is an SSD network
(VGG-16 base plus extra feature layers, 300 x 300 input) quantized to 16-bit
fixed point. Almost all of its work is convolution. The paper proposes running
those convolutions on an Intel (Altera) Arria 10 FPGA. Camera frames and network
coefficients live in external DDR3 memory. A Nios II soft processor sets up the
transfers, and the layers are processed in tiles because neither a layer's
coefficients nor its feature maps fit on chip.

The paper describes this accelerator only in outline: a paragraph of text, the
convolution loop nest, and a figure of the tiled accelerator it says it resembles.
Everything below that outline is this implementation's own choice, and is marked
as such. That includes tile sizes, loop order, memory layouts, interfaces and the
register map. The section "What follows the paper and what does not" lists the
choices.

## The computation

A convolution layer with R output channels, Q input channels, a K x K kernel and
stride S computes

    Y[r][m][n] = sum over q < Q, k < K, l < K of  W[r][q][k][l] * X[q][S*m + k][S*n + l]

Layers are run one at a time. Each layer reads its input feature map from
external memory and writes its output feature map back, where the next layer
reads it. The paper writes the inner statement as `Y[r][m][n] += W[r][q][k][l] *
X[q][m-k][n-l]`. That form differs from the one above only by a flipped kernel,
so the host flips each kernel when it stores the coefficients.

The engine holds TM = 16 output channels and TN = 8 input channels at a time,
and it walks the loop nest in tiles:

    for each tile of TM output channels                      (oi)
      for each band of TR output rows                         (r0)
        for each tile of TN input channels                    (ii)     <- one "step"
          load TN input planes (the rows the band needs) and the
              TM x TN x K x K weight tile into one bank of the on-chip buffers
          for every output pixel (m, n) of the band, for every tap (k, l):
              TM x TN multiply-accumulates in one cycle
          add each pixel's TM sums into the accumulation buffer
        requantize the band's TM output channels and write them to memory

### Steps, banks and overlap

The input buffer and the weight buffer each have two banks. Step s is loaded
into bank s mod 2. The loader, a DMA reader, works one step ahead of the compute
side. While the PE array computes from one bank, the DMA fills the other, so
memory transfers overlap computation. A bank is marked full when its load ends,
and empty when its compute ends. The loader waits for an empty bank and the
compute side waits for a full one. Both waits are counted (`N_STALL` counts the
compute waits).

### Data that is already on chip is not fetched again

Each buffer bank remembers what it holds: the weight bank keeps the weight tile
(oi, ii), and the input bank keeps the input tile (row band, ii). When a step
needs a tile that is already in its own bank, that fetch is skipped.
`N_WREUSE` counts skipped weight fetches and `N_IREUSE` counts skipped input
fetches. Weight reuse happens in two common cases:

- All input channels of the layer fit in one tile (Q <= TN). Every row band of
  an output tile then uses the same weights, so after the first two bands the
  weights are never fetched again for that output tile.
- Exactly two input tiles (Q <= 2 TN). Steps alternate ii = 0, 1, so each bank
  keeps its own tile across all row bands.

Input reuse happens when a layer has a single row band and one or two input
tiles. The input planes then stay on chip while the output-channel tiles go by.
This is typical of SSD's small late layers, for example 5 x 5 and 3 x 3 maps.
For other layers, reuse happens only where it falls out of the loop order. A new
layer start clears all tags.

### Partial sums stay on chip

A layer with more than TN input channels takes several steps for each output
pixel. The accumulation buffer holds the partial sums of TM channels for every
pixel of the band, in 48 bits:

- the first input tile writes its sums (clear);
- later input tiles add to them;
- after the last input tile the DMA writer reads the sums out, requantizes them
  and stores them.

Partial results never go out to memory and come back.

The accumulation buffer has two banks of `OBUF_DEPTH` pixels each, the same
ping-pong idea as buffer1 and buffer2 on the input side. While the DMA writer
drains a finished band from one bank, the PE array accumulates the next band
into the other. The compute side waits only if the write-back of the band
before that is still running.

## Number format

Every feature value and coefficient is a 16-bit two's-complement number. The
position of the binary point is chosen per layer (dynamic fixed point). The
product of two 16-bit values is exact in 32 bits, and sums are kept in 48 bits.
To return to 16 bits the requantizer does four things:

1. shifts right by `FRAC_SHIFT`, which equals the fractional bits of the input
   plus those of the weights, minus those of the output;
2. rounds half up;
3. saturates to [-32768, 32767];
4. clamps negative values to zero if `RELU` is set.

Choosing the fractional widths is done offline, per layer, from the layer's
dynamic range.

## Memory layout the host must follow

Memory is addressed in 16-bit words.

- **Input feature map**: `[Q][H][W]` planes, already zero-padded. `IN_H` and
  `IN_W` include the padding. The output size is `OUT_H = (IN_H - K)/S + 1`, and
  the same for the width.
- **Weights**: tile by tile, in the order (oi, ii). Tile (oi, ii) is one
  contiguous run of TM*TN*K*K words starting at
  `W_BASE + (oi*ceil(Q/TN) + ii) * TM*TN*K*K`. Inside a tile the order is
  `[tm][tn][k][l]`. Entries for channels beyond R or Q are zero. Because a tile is
  a single run, one burst fetches it.
- **Output feature map**: `[R][OUT_H+2P][OUT_W+2P]`, written at offset (P, P) of
  each plane, where P = `OUT_PAD`. The host zeroes the frame first, so the next
  layer finds its padding in place.
- **Camera frames**: written word by word, in stream order, into two
  alternating slots at `FRAME_BASE` and `FRAME_BASE + FRAME_WORDS`. A camera (or
  its interface) that delivers planar, zero-padded planes therefore produces a
  frame that the first layer can read directly.

## Programming a layer

The register port is a 32-bit Avalon-MM slave with word addresses and a read
latency of one cycle.

| addr | name | access | meaning |
|---|---|---|---|
| 0 | CTRL | w | bit 0: start the programmed layer |
| 1 | STATUS | r/w | bit 0 busy, bit 1 done (write 1 to bit 1 to clear); `irq` = done |
| 2, 3, 4 | IN_BASE, W_BASE, OUT_BASE | rw | word addresses |
| 5 to 10 | IN_C, IN_H, IN_W, OUT_C, OUT_H, OUT_W | rw | layer sizes (16 bits) |
| 11 | K | rw | kernel size, 1 to KMAX |
| 12 | STRIDE | rw | 1 or 2 |
| 13 | TR | rw | output rows per band |
| 14 | FRAC_SHIFT | rw | requantization shift |
| 15 | RELU | rw | bit 0 |
| 16 | OUT_PAD | rw | zero border around the output |
| 17, 18 | FRAME_BASE, FRAME_WORDS | rw | camera frame slots |
| 19, 20 | FRAME_COUNT, DONE_SLOT | r | frames stored, slot of the newest |
| 21 to 25 | N_STEPS, N_WFETCH, N_WREUSE, N_OVERLAP, N_STALL | r | activity of the last layer |
| 26 | N_IREUSE | r | input-tile fetches skipped in the last layer |

To run a layer, write registers 2 to 16, write 1 to CTRL, then wait for `irq`
and clear it.

TR must satisfy two limits:

- the band's input rows must fit in one lane of the input buffer:
  `((TR-1)*S + K) * IN_W <= IBUF_DEPTH`;
- the band's output pixels must fit in the accumulation buffer:
  `TR * OUT_W <= OBUF_DEPTH`.

Assertions in the engine catch a violation in simulation. For the first SSD layer
(input 302 words wide after padding, 300 outputs wide, K = 3), TR can be at most 6.

## Blocks

```
ssd_accel_top
├── csr_regs          registers for the soft processor (Avalon-MM), start, irq
├── frame_writer      camera stream -> two frame slots in memory
├── conv_engine       one layer: loader FSM, compute FSM, bank bookkeeping
│   ├── dma_reader        memory runs -> input / weight buffer lanes
│   ├── pingpong_buffer   input buffer,  TN lanes x IBUF_DEPTH, two banks
│   ├── pingpong_buffer   weight buffer, TM*TN lanes x KMAX^2, two banks
│   ├── pe_array          TM processing elements, input vector broadcast
│   │   └── pe            TN multipliers, adder tree, accumulator
│   ├── acc_buffer        TM lanes x 2*OBUF_DEPTH partial sums, 48 bit
│   └── dma_writer        requant + strided writes of the finished band
│       └── requant
└── mem_arbiter       round-robin: frame writer, DMA writer, DMA reader -> one port
ssd_accel_pkg         widths, memory request/response structs, layer_cfg_t
```

Each file opens with a description of the module's behaviour, interface and
timing.

### Pipeline and timing

The compute side issues one kernel tap per cycle. The cycle a tap is issued, both
buffers are read. One cycle later the PE array multiplies and accumulates. One
cycle after the last tap of a pixel, the TM sums go into the accumulation buffer
by read-modify-write. A step of a band with `rows` output rows takes
`rows * OUT_W * K * K` compute cycles plus a 3-cycle drain.

Peak throughput is TM*TN = 128 multiply-accumulates per cycle. It is reached only
when a layer's channel counts are multiples of TN and TM, and when loads keep up.

The memory port moves one 16-bit word per cycle:

- The DMA reader issues back to back and takes responses in order, with any
  latency.
- The DMA writer sends one output word per cycle. It is a two-stage pipeline:
  a buffer read, then a request register.

Memory bandwidth therefore limits 1 x 1 layers and layers with few output pixels.

### Memory port and arbitration

All memory traffic uses one request/response bundle. The request (`mem_req_t`)
carries valid, we, a 32-bit word address and 16-bit write data. It is accepted in
a cycle where valid and ready are both high, and it must stay unchanged until
then. Read data returns in request order (`mem_rsp_t`).

The arbiter grants one master per cycle, in round-robin order. It records which
master issued each read, in a FIFO, and routes each response back to that master.
At most MAX_READS reads are in flight.

Assertions check two rules:

- an unaccepted request stays unchanged;
- no response arrives without an outstanding read.

The camera stream has back-pressure: a real camera link would need a FIFO in
front of it that is deep enough to cover the time the arbiter serves the engine.

## What follows the paper and what does not

The following come from the paper:

- 16-bit fixed point with a per-layer binary point.
- Layers processed tile by tile from external memory.
- A structure of processing elements, an interconnect and two on-chip buffers
  between the computation and external memory.
- No refetch of what is already on chip. The paper says this of layers;
  here it is applied to weight tiles and input tiles.
- Intermediate results kept in on-chip buffers.
- Coefficients stored next to one another in DRAM.
- A soft processor that sets up DMA transfers.
- Camera frames stored in memory and read from there.
- The convolution loop nest.
- Kernels of 3x3 and 1x1 with strides 1 and 2, as in the SSD layers.

The following are this design's own:

- TN = 8, TM = 16 and all buffer depths.
- The loop order.
- The tag-per-bank reuse rule.
- Every memory layout above.
- The register map.
- The valid/ready memory bundle.
- The round-robin arbiter.
- Two frame slots.
- Round-half-up rounding and saturation.
- The optional ReLU. The paper does not mention it for this design, but the SSD
  layers need it.
- The 48-bit accumulator.
- Reset behaviour: asynchronous, active low.

The paper's system figure shows a host CPU over PCIe sending the coefficients.
Its text says that no hard processor is used and that a Nios II soft processor
sets up the transfers. This design follows the text.

Not built here:

- The Nios II processor, the DDR3 memory controller and the DRAM. These are
  vendor parts; `tb/mem_model.sv` is a behavioural stand-in for controller and
  memory together.
- The USB camera link.
- The host and PCIe link.
- Max pooling. VGG-16 needs it, and the paper does not describe hardware for it.
- Dilated convolution. SSD's fc6 is dilated, but the paper does not print a
  dilation.
- SSD's detection decoding and non-maximum suppression.
- Bias addition. The paper's loop nest has no bias term. A bias can be folded
  in as an extra input channel that holds the constant 1.

What that means for the detector:

- All of SSD's convolution layers fit the default buffers, except the dilated
  fc6, which would have to be recast.
- The complete network needs the missing layers, either on the processor or in
  added hardware.
- At 128 MACs per cycle and, for example, 200 MHz, one 300 x 300 SSD frame of
  about 30 GMAC takes over a second. That is far from the camera's 30 frames per
  second: the array would have to be tens of times larger, and the memory port
  much wider.

## Simulating

Every block has a self-checking testbench in `tb/`, named `tb_<module>`. Each
one ends by printing `TB_RESULT checks=N failures=M`. They use Verilator 5 with
timing support. For example:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_ssd_accel_top \
        -y rtl -y tb +libext+.sv rtl/ssd_accel_pkg.sv tb/tb_ssd_accel_top.sv
    ./obj_dir/Vtb_ssd_accel_top

- `tb_ssd_accel_top` runs the whole accelerator at its default parameters. It
  acts as both processor and camera. It stores a frame, then runs three layers on
  it in a chain:
  - 3 -> 20 channels, 3x3, ReLU;
  - 20 -> 10 channels, 3x3, stride 2, three input tiles;
  - 10 -> 40 channels, 1x1. Its input planes stay on chip across the three
    output-channel tiles.

  A second frame streams in during the second layer. Every output word is
  compared with a convolution computed in the testbench. The testbench also
  counts that each mechanism happened at least once: weight fetch and reuse,
  input reuse, load/compute overlap, compute waiting for a load, multi-tile partial sums,
  stride 2, saturation, ReLU, memory conflicts, frame completion and the
  interrupt.
- `tb_ssd_layers` runs three of SSD's extra feature layers, Conv9_2, Conv10_2
  and Conv8_2, at their real sizes through the full accelerator and checks
  every output. That is six convolutions: 512 -> 128 -> 256 -> 128 -> 256
  channels on 10 x 10 and smaller maps, then 1024 -> 256 -> 512 channels on a
  19 x 19 map. The 1024-channel layer takes 128 input-channel tiles. The six
  layers take 12.8 million cycles, most of them loading weights and inputs.
- `tb_ssd_frame_conv1` streams one full 300 x 300 RGB frame through the camera
  port. It then runs the first VGG-16 convolution on the frame (3 -> 64
  channels, 300 x 300 outputs) and checks all 5.76 million outputs. The run
  takes about a minute in Verilator. The layer takes 7.2 million cycles:
  - 3.2 million cycles of computation;
  - 5.76 million output words written at one word per cycle, mostly while the
    next band computes;
  - the loads of each band, which share the same port.

  The 16-bit memory port is what limits it.
- `tb_conv_engine` checks the engine at a smaller tile size. The cases are
  partial channel tiles, several row bands, stride 2, 1x1 kernels and padding.
  It also checks:
  - the compute cycle count, `rows*OUT_W*K*K` per step;
  - the number of steps;
  - weight reuse when all input channels fit one tile;
  - input reuse across output-channel tiles;
  - that a band's write-back overlaps the next band's computation.
- The remaining testbenches check one block each against an independent
  reference model: PE sums, requantization in real arithmetic, bank isolation,
  DMA lane and address mapping, strided write-back, arbiter routing and
  fairness, frame slots, and the register map.

The testbenches apply reset before they check anything, and they initialise
every memory word they read. They therefore also run on a two-state simulator,
where flip-flops and memories start at random values.

## Changing it

- **Tile sizes**: `TN`, `TM`, `KMAX`, `IBUF_DEPTH` and `OBUF_DEPTH` are
  parameters of `ssd_accel_top`. The register port, the memory layout and the
  testbench references all follow them. If TN or TM changes, the host's
  weight-tile layout changes with them.
- **Accumulator width**: `ACC_W` in `ssd_accel_pkg` sets the accumulator width.
- **Wider memory port**: this needs a wider `data_t` in the memory structs and
  matching changes to the DMA reader and writer. The tile logic does not depend
  on the port width.
