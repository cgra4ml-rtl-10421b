# A reconfigurable CGRA engine for quantized neural networks

A single small array of multiply-accumulate units runs every layer of a quantized neural
network, one layer after another: convolutions of any kernel size up to 7x7, and dense layers.
Nothing about the layer is fixed in hardware. What changes from layer to layer is a handful of
runtime parameters. They decide how the array's columns group together, and how the input,
weight and output tensors are cut into slices that stream through the engine.

The engine follows the CGRA architecture of *CGRA4ML* (Abarajithan et al.). This RTL is an
independent implementation of that architecture. The array, the weights cache, the pixel
shifter and the cycle schedule follow the published description. The stream formats, the
register map, the output path and the control encoding are this implementation's own choices,
made where the description is silent. Those choices are listed under "Where this design
departs or chooses" below.

## The unified dataflow

A layer is described by the sizes in the table below. A dense layer is the case
K_H = K_W = W = 1, with the batch placed along H.

| Symbol | Meaning |
|---|---|
| N, H, W | Images, height and width of the input |
| I, O | Input and output channels |
| K_H, K_W | Kernel height and width |

The array has R rows and C columns of processing elements (PEs). The layer is mapped onto it as
follows:

- **Rows are output heights.** A height slice of H_S = R rows is computed at once. An image
  needs H_T = ceil(H/R) slices.
- **Columns are output channels times kernel columns.** The C columns group into
  O_S = floor(C/K_W) groups of K_W neighbouring columns. Each group computes one output
  channel. An output-channel slice therefore holds O_S channels, and the layer needs
  O_T = ceil(O/O_S) slices. The C mod K_W columns left over stay idle.
- **Input channels are cut into slices of I_S.** I_S is chosen so that I_S·K_H ≤ D_W, the
  depth of the weights cache. There are I_T = ceil(I/I_S) such slices.

The engine's work for a layer is I_T·O_T *iterations*. Each iteration loads one weight packet
of I_S·K_H rows, each row holding C weights. It reuses that packet for every pixel of every
image: N·H_T·W times. For each output pixel column w the schedule is as follows.

1. **I_S·K_H MAC beats.** In each beat the array receives:
   - one row of C weights from the weights cache, for the pair (i_s, k_h);
   - a column of R pixels from the pixel shifter: input rows h_t·R + r + k_h − K_H/2, for
     channel i_s, at image column w.

   PE (r, c) adds x[r]·k[c] to its accumulator. After these beats, the PE in column
   k_w of group o_s holds the sum over (i_s, k_h) for kernel column k_w.

2. **One shift beat.** Within every group, each accumulator moves one column to the right, and
   the first column of the group restarts from zero. The last column of each group, which
   has now collected all K_W kernel columns, hands its R sums to the output path.

   Because the accumulators slide along the group, the horizontal convolution never re-reads
   an input pixel. Pixel column w enters once. It is used by all K_W kernel columns as the
   partial sums pass it.

This gives the cycle count of a layer, one cycle per iteration for swapping weight banks plus
one beat per MAC or shift step:

    cycles = O_T · I_T · (1 + N · H_T · W · (1 + I_S · K_H))

The weights cache produces exactly this beat sequence. The testbenches check it. The count is
reached when the streams and the output keep up. Stalls only add cycles.

### What comes out

For each (n, h_t, w) the array emits O_S output beats of R words, groups in descending o_s
order.

- **Width.** Each word is a Y_BITS (24-bit) partial sum.
- **Which window.** The sum for column w is the window whose last kernel column is w:

      y[n, h_t·R + r, w, o] = Σ_{i in slice i_t} Σ_{k_h, j} K[k_h, j, i, o] ·
                              X[n, h_t·R + r + k_h − K_H/2, w − K_W + 1 + j, i]

  Inputs outside the image count as zero.
- **Host post-processing.** The host picks the columns it wants, which handles horizontal
  padding and stride. It also adds the I_T partial sums of one output, then applies bias,
  activation and pooling. This split, with the array doing MACs and a processor doing the
  rest, is the intended partition of the architecture.

## Blocks

```
  AXI-Lite ──► config_regs ──cfg──► dma_controller ──descriptors──► (3 DMAs, outside)
                                   │
  weights stream (128b) ─► axis_gearbox ─► weights_cache ─┐ C weights + control (TUSER)
                                         (2 × sdp_ram)     ▼
  pixel stream (128b) ──► axis_gearbox ─► pixel_shifter ─► pe_array (R × C pe) ─► axis_gearbox ─► output stream (128b)
                                         (sdp_ram)     R pixels         R sums per beat
```

**pe.** A signed multiplier and adder, an accumulator register and an output register. Each
register sits behind a two-way multiplexer:

- the accumulator register takes either "accumulate" or "take left neighbour / zero";
- the output register takes either "capture own accumulator" or "take left neighbour's output
  register".

**pe_array.** R×C PEs. Pixel r is broadcast along row r and weight c down column c. The array
decodes the group boundaries from K_W and O_S, which arrive with each weight beat. The output
registers of each row form a shift chain towards column C−1.

- **Capture.** At a shift beat, the last column of every group captures its accumulator.
- **Drain.** The chain then shifts one place per cycle. Column C−1 presents R words per beat
  on the output stream, and a tag marks which columns hold a result.
- **Stall.** A shift beat may only capture into an empty chain. So when the output path is
  slower than the MAC beats, the array stalls the weight and pixel streams until the chain has
  drained. This happens when K_W is small and O_S large, or when the output stream is held up.

**weights_cache.** Two banks of C·K_BITS bits × D_W rows, used as ping-pong buffers.

- **Write side.** Fills a free bank with the next weight packet while the array works from the
  other bank.
- **Read side.** Sends the rows of the current bank N·H_T·W times. After every I_S·K_H rows
  it inserts a shift beat. Shift beats carry `clr` at the end of each image row and `last` at
  the end of the iteration. When the last beat has been issued, the bank is freed and the
  other bank is used.
- **Bank swap.** One idle cycle per iteration, the "1 +" of the cycle count.

**pixel_shifter.** Turns the input stream into R pixels per cycle, reusing each input pixel for
all K_H kernel rows.

- **Input beats.** For every (n, h_t, w, i_s) the stream carries one beat of R + K_H/2 words:
  the R rows of the slice plus the K_H/2 rows below it.
- **Rows above the slice.** The K_H/2 rows above the slice were the bottom rows of the previous
  slice. Those rows were saved from the previous beat of the same (n, w, i_s) in a small SRAM,
  one entry per (n, w, i_s), and are read back now. For the first slice of an image they are
  zero.
- **Shifting.** The R + 2·(K_H/2) words are loaded into a register bank, which is shifted K_H
  times. Its top R registers feed the array.
- **Bandwidth.** The stream carries only R + K_H/2 words per R·K_H pixels delivered.
- **Staging.** A staging register lets the next beat be loaded on the same cycle as the last
  shift of the current one, so the shifter sustains one output per cycle.

**axis_gearbox.** A bit-packing width converter between the 128-bit DMA streams and the
internal widths:

- 384-bit weight rows, i.e. 96 columns × 4 bits;
- (R + K_H/2)·4-bit pixel beats, whose width changes with K_H at runtime;
- 8 × 24 = 192-bit output beats.

Packets are packed densely, LSB first, and zero-padded to a whole 128-bit beat. On the input
side the consumer pulses `flush` after the last beat of a packet, which discards the padding.
On the output side the converter pads the final beat and raises TLAST.

**config_regs.** An AXI-Lite register bank, described under "Using the engine".

**dma_controller.** Issues the per-iteration descriptors for the three DMAs, in this order:

- weights packet (i_t, o_t);
- pixel packet i_t, which is re-read for every o_t;
- output packet (i_t, o_t).

It counts completions and raises done when all three DMAs have finished I_T·O_T packets.

**sdp_ram.** A one-write, one-read synchronous RAM with registered read and read-first
behaviour. It stands in for FPGA block RAM or ASIC SRAM macros.

## Memory layout

All three tensors are stored in memory as packets that the DMAs read or write linearly.

| Tensor | Packet | Beat / row order (outer to inner) | Words within a beat |
|---|---|---|---|
| Weights | (i_t, o_t), `w_pkt_bytes` | rows (i_s, k_h) | C words; column o_s·K_W + k_w holds K[k_h, k_w, i_t·I_S+i_s, o_t·O_S+o_s] |
| Pixels | i_t, `x_pkt_bytes` | (n, h_t, w, i_s) | R + K_H/2 words: rows h_t·R … h_t·R + R + K_H/2 − 1 |
| Outputs | (i_t, o_t), `y_pkt_bytes` | (n, h_t, w, o_s descending) | R words of 24 bits |

Values that fall outside the tensor are zero:

- weights for channels beyond I or O;
- pixel rows below the image;
- the partial final channel slice.

Words are two's-complement, packed LSB first with no gaps, and each packet is padded to a
multiple of 16 bytes. The packet base addresses advance by the packet size, in (i_t, o_t)
order.

## Using the engine

1. **Write the layer parameters.** Each register is 32 bits at byte address 4 × index:

   | Index | Registers |
   |---|---|
   | 0 | CTRL |
   | 1 | STATUS |
   | 2–10 | K_H, K_W, O_S, I_S, W, H_T, N, I_T, O_T |
   | 11–16 | WBASE, WPKT, XBASE, XPKT, YBASE, YPKT |

   Counter fields use 16 bits. O_S must be floor(C/K_W). I_S·K_H must not exceed D_W.
   K_H must be odd and at most 7.
2. **Start the layer.** Write 1 to CTRL bit 0.
3. **Run the DMAs.** Serve the descriptors. Each has valid/ready, a byte address and a byte
   length, one per DMA, and the DMA answers with a one-cycle status pulse when the packet is
   done.
4. **Wait for completion.** Wait for STATUS bit 1 (done), then clear it by writing 1 to it.
   STATUS bit 0 is busy.

### Default build

| Parameter | Default | Origin |
|---|---|---|
| R × C | 8 × 96 | The published system |
| X_BITS, K_BITS | 4 | ResNet-50 build |
| Y_BITS | 24 | Published benchmark accumulator |
| AXI_W | 128 | Published system |
| D_W | 256 | This design's choice |
| KH_MAX | 7 | This design's choice |
| PIX_DEPTH | 4096 | This design's choice |

At these sizes ResNet-50's layers fit:

- its 3×3 layers use I_S up to 85;
- the stem's 7×7 kernel is within KH_MAX;
- the pixel SRAM needs N·W·I_S entries, at most 3584 for the 56-wide stage.

Models with 8-bit data (the autoencoder and dense microbenchmarks) need X_BITS = K_BITS = 8.

## Where this design departs or chooses

- **Configuration path.** In the published system, configuration words travel to the engine
  through the DMAs along with the data. Here the layer parameters stay in the AXI-Lite
  registers for the whole layer, and the weights cache and pixel shifter read them directly.
  Only the derived control bits (shift, clr, last, K_W, O_S) travel with the weights as TUSER,
  so the PEs still reconfigure beat by beat.
- **Pixel beat width.** The published description gives the pixel beat both as R + K_H − 1
  words and, in its worked example and its bandwidth model, as R + K_H/2 words with the upper
  K_H/2 rows kept on chip. This design implements the second. The shift register bank holds
  R + K_H − 1 words in both readings.
- **Output path and order.** The output shift chain, the descending o_s order within a pixel,
  and the window alignment (last tap at w) are this design's.
- **Host-side work.** Horizontal padding, stride, the sum over I_T, bias, activation and
  pooling are left to the host. Rows below and above the image are zero, through memory and
  through the pixel SRAM respectively.
- **Outside this RTL.** The DMAs, the processor and its firmware, DDR, and ASIC SRAM macros are
  outside this RTL. The DMA side is brought out as descriptor, status and AXI-Stream ports.
- **Overflow.** Accumulators wrap at 24 bits. There is no saturation.
- **PE registers.** The published PE drawing registers an incoming operand ahead of the
  multiplier. Here operands are broadcast unregistered to a whole row or column. The PE's
  second register serves the output chain instead.

## Verification

Every block has a self-checking testbench in `tb/`. The testbenches compare against values
computed independently in the testbench, use random valid/ready on every stream, and stop
with a watchdog. Each prints `TB_RESULT checks=N failures=M`.

`tb_axi_engine` runs the engine at its default size (8 × 96 PEs) through five layers:

| Layer | Why it is there |
|---|---|
| 3×3 conv | I_T = O_T = 2 |
| Dense, 100 outputs | O_S = 96 |
| 7×7 conv | Two images |
| 5×5 conv | Output padding |
| 1×1 layer | Output-limited |

The testbench plays memory, DMAs and host. It checks every output word bit for bit against a
direct convolution. It also checks that the weight beats per layer equal
I_T·O_T·N·H_T·W·(1 + I_S·K_H), and that each of these mechanisms occurred:

- output-chain stalls;
- back-pressure;
- weight loading overlapping compute;
- top rows from the pixel SRAM, and zero top rows;
- row clears;
- dropped input padding and added output padding;
- conv and dense modes.

`tb_workloads` runs, at the default size:

- the jet-tagger network (dense 16-64-32-32-5, batch 16), layer after layer. The testbench
  does the host's ReLU and 4-bit requantisation between layers. The final outputs must equal
  an integer model of the whole network.
- the worked 5×5 example (6 × 6 × 3 image, 4 output channels).
- crops of the ResNet-50 7×7 stem and of a 64→64 3×3 layer. With all streams ready, the
  3×3 layer must finish in the cycle count given by the formula above, and it does so
  exactly: 3090 cycles.

`tb_weights_cache` checks the iteration length 1 + N·H_T·W·(1 + I_S·K_H) cycles with the
array always ready. `tb_pixel_shifter` checks one output per cycle.

To run a testbench with Verilator (5.x):

    verilator --binary --timing --assert -Irtl -y rtl rtl/cgra_pkg.sv tb/tb_axi_engine.sv \
              --top-module tb_axi_engine -o tb_axi_engine
    ./obj_dir/tb_axi_engine

The full-size end-to-end run takes about half a minute to build and seconds to simulate.

## Changing it

- **Sizes.** All sizes are parameters of `axi_engine`, with defaults in `cgra_pkg`. The
  testbenches of the sub-blocks use smaller arrays, such as 4 × 12 for the worked example of
  a 5×5 kernel.
- **Data width.** For 8-bit data, set X_BITS and K_BITS to 8. The gearboxes size their
  buffers from the stream widths, so no other change is needed.
- **Deeper weights cache.** Raise W_DEPTH, which allows larger I_S.
- **Wider images.** Raise PIX_DEPTH, which must be at least N·W·I_S for every layer with
  K_H > 1.
