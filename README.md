# A 16×16 systolic-array GEMM accelerator for 8-bit DNN inference

Convolution layers of a quantized DNN become matrix multiplications (GEMM) when
the framework lays them out with im2col. Each output pixel row is multiplied
with each filter row: `out[p][m] = Σ_k x[p][k]·w[m][k]`. On a small edge FPGA
next to a CPU, offloading those GEMMs and leaving everything else on the CPU
gives most of the speed-up. This RTL implements such an offload engine. It is
the systolic-array ("SA") accelerator of the SECDA case study (Haris et al.,
"SECDA: Efficient Hardware/Software Co-Design of FPGA-based DNN Accelerators
for Edge Inference"), which targeted a PYNQ-Z1 board (Zynq XC7Z020) running
TensorFlow Lite.

The accelerator takes 8-bit inputs and weights over a DMA stream, multiplies
them on a 16×16 output-stationary array of MAC units, and requantizes the
32-bit results to 8 bits on chip. Requantizing on chip makes the returned data
four times smaller than 32-bit results would be. The host driver formats the
data, cuts large layers into pieces that fit, and puts the results back in
place.

The paper describes the accelerator at block level: which blocks exist, what
each one does, how they connect, and the MAC unit's registers. Every width,
encoding, buffer size, packet format and timing detail below is this design's
own choice. Those choices are listed in [Departures and choices](#departures-and-choices).

## Block structure

```
            s_* stream (DMA -> accelerator)
                 |
        +--------v---------+      +-----------------------------+
        |  input_handler   |      |   global buffers (BRAM)      |
        |  header handler  |----->|  weights 16 x 4096 words     |
        |  data handler    |      |  inputs  16 x 2048 words     |
        +--------+---------+      |  biases  16 x  256 words     |
                 | cfg, start     +------+-----------+----------+
        +--------v---------+             | 16 words  | 16 words per cycle
        |    scheduler     |------+------v--+  +-----v-----+
        |  fill engine     | push | input   |  | weight    |
        |  step controller |<-----| queues  |  | queues    |  (16 + 16)
        +--+-----------+---+ pop  +----+----+  +-----+-----+
           | tile_valid|               | a_in (rows) | b_in (columns)
           |           |          +----v-------------v----+
           |           +--------->|  systolic_array 16x16 |
           |            step/clr  |  mac_unit: I, W, O    |
           |                      +----------+------------+
           |                                 | 256 x 32-bit acc
        +--v---------------------------------v--+
        |                 ppu                    |---> m_* stream (to DMA)
        +----------------------------------------+
```

| Module | Role |
|---|---|
| `secda_pkg` | word and element widths, packet opcodes, the `gemm_cfg_t` configuration struct |
| `input_handler` | decodes packet headers; writes payloads into configuration registers and buffers |
| `global_buffer` | banked BRAM: one write port, all banks read at the same address in one cycle |
| `data_queue` | FIFO taking 32-bit words in and giving 8-bit elements out; 32 of them feed the array edges |
| `scheduler` | fill engine (buffers → queues) and step controller (queues → array → PPU) |
| `systolic_array`, `mac_unit` | 16×16 grid; inputs move right, weights move down, each unit keeps one output |
| `ppu` | bias, fixed-point scale, rounding shift, output offset, clamp; 32-bit → 8-bit |
| `secda_sa_top` | connects the blocks; AXI-Stream style ports |

## Talking to the accelerator: packets

Data arrive on four 32-bit input streams (links 0–3), one per high-performance
AXI port of the Zynq. Each link has its own input handler, and all four can
write the buffers in the same cycle. `CONFIG` and `RUN` are sent on link 0
only. Link *l* carries the bias, weight and input rows *n* with *n* mod 4 = *l*.
A data packet on link *l* therefore holds every fourth row. Its *j*-th row is
global row 4*j* + *l*. A `RUN` header on link 0 waits until the other links
are between packets, so the data loaded in parallel is complete when the run
starts. Results leave on one 32-bit output stream.

Each packet is a header followed by
its payload. The header's bits [31:28] hold the opcode and bits [27:0] the
payload length in words.

| Opcode | Payload | Effect |
|---|---|---|
| 1 `CONFIG` | 7 words | word 0: `kw = K/4` [15:0], weight row blocks [23:16], input row blocks [31:24]; word 1: input zero-point offset [15:0], weight zero-point offset [31:16]; word 2: Q31 multiplier; word 3: right shift [4:0]; word 4: output offset; word 5: activation minimum; word 6: activation maximum |
| 2 `BIAS` | one int32 per output channel | bias of global channel *m* goes to bank *m* mod 16, address *m* div 16 |
| 3 `WEIGHT` | rows of `kw` words | global weight row *m* goes to bank *m* mod 16, addresses (*m* div 16)·kw … +kw−1 |
| 4 `INPUT` | rows of `kw` words | same layout in the input buffer |
| 5 `RUN` | none | computes all (input block × weight block) tiles |

A data word carries four consecutive k-elements, element 0 in bits [7:0]. The
driver pads K to a multiple of 4 with each tensor's zero point. After the
offset is added, a padded operand is then exactly 0, whereas a plain 0 byte
would not be. Row counts are padded to multiples of 16, and the results of
padded rows are discarded. Every data packet starts writing at row 0, so a new `WEIGHT` packet
replaces the weights of earlier ones.

While a run is in progress no link accepts a header: each `s_tready` stays low
until `busy` falls. The buffers have no double buffering, so the next
layer's data cannot be loaded during a run. The driver overlaps its own
preparation work with the run instead.

The bank layout is what lets the array run at full rate. The 16 rows of one
block sit at the same addresses in 16 different BRAMs. One shared read address
therefore returns one word for each of the 16 array rows, and the same holds
for the 16 columns in the weight buffer.

## How a tile moves through the array

A run walks the output tiles with the input row block in the outer loop and
the weight row block in the inner loop. Each tile is 16 input rows × 16 weight
rows and needs K multiply-accumulates per MAC unit. The scheduler has two
halves that work independently.

**Fill engine.** Each cycle it reads one word from every input bank and every
weight bank. A cycle later it pushes those 32 words into the 32 queues. It
reads only while every queue has room for the word already in flight, so it
never overflows a queue (an assertion checks this). Nothing ties it to the
tile being computed, so it runs ahead into the next tile as soon as the array
frees space. This is how queue filling overlaps array processing.

**Step controller.** This part is the least obvious. In an output-stationary
array, unit (r, c) must see `x[r][k]` and `w[c][k]` in the same step. Inputs
travel one unit right per step and weights one unit down per step, so the edge
feeds are skewed. Row lane r carries element `t − r` at step t, and column lane
c carries element `t − c`. Outside `0 ≤ k < K` a lane carries zero. A unit
multiplies the operands it registered in the previous step, so unit (r, c)
adds its last product at step `K + r + c`. A tile therefore takes
**K + 2·16 − 1 steps**. The testbenches check this count exactly.

A step happens only when every lane that must deliver an element has one in
its queue. Otherwise the whole array waits for that cycle (`stall_data`). The
zero-point offsets are added to the 8-bit elements at the array edge, giving
9-bit signed operands `x + in_off` and `w + wgt_off`. This is gemmlowp's
offset scheme, so uint8 tensors with any zero point give exact results.

After the last step the controller waits until the PPU is free. It then raises
`tile_valid` for one cycle. In that cycle the PPU copies all 256 accumulators
and the tile's 16 biases, and the array is cleared. The bias word for a tile is
read from the bias buffer when the tile starts.

### Throughput

| Stage | Cycles per 16×16 tile |
|---|---|
| array | K + 31 steps, plus 1 handoff cycle |
| PPU / output stream | 64 words, 1 word per cycle |
| queue filling | K/4 cycles (one word holds four elements) |

The array is the bottleneck for K ≥ 33. Below that, tiles wait for the PPU
(`stall_ppu`). At K = 576 (a 3×3×64 convolution), one tile makes 147,456 MACs
in about 608 cycles, which is 94.7 % of the 256 MACs per cycle peak. The
31-step fill and drain skew is paid once per tile.

## Post-processing (PPU)

For each accumulator `acc` in column `c` (output channel):

```
x   = acc + bias[c]                                   (32-bit wrap)
y   = SaturatingRoundingDoublingHighMul(x, mult)      ((x*mult + 2^30) / 2^31, rounded;
                                                       INT_MIN*INT_MIN saturates)
y   = RoundingDivideByPOT(y, shift)                   (arithmetic shift, ties away from zero)
y   = clamp(y + out_off, act_min, act_max)            (ReLU / ReLU6 through the bounds)
out = y[7:0]
```

This is the quantized output stage of gemmlowp and TFLite, computed bit-exactly.
The multiplier and shift apply to the whole layer, and the bias is per channel.
The tile leaves row by row, four results per word, as `out[p][m]` with m in the
byte lanes. That is channel-innermost order, which TFLite's NHWC tensors use.
`m_tlast` marks the last word of a run. Output order: input block, then weight
block, then tile row, then four-channel group.

## Fitting real layers

The default buffers hold 256 KiB of weights, 128 KiB of inputs and 4096 biases.
One 16-row block may be up to K = 8192 (inputs) or 16384 (weights) long. Most
convolution layers of MobileNetV1/V2, InceptionV1 and ResNet18 have more
weights than 256 KiB; ResNet18's 3×3 512→512 layer needs 2.25 MiB. The driver
then splits the layer:

* **Weight tiling.** Send the inputs once, then for each slice of output
  channels send `CONFIG`, `BIAS` and `WEIGHT` for that slice, followed by
  `RUN`. The inputs remain in the buffer between runs.
* **Pixel tiling.** Split the im2col rows into runs of at most
  `2048 / kw` blocks of 16 rows.

The original work reports that large layers of InceptionV1 and ResNet18 did not
fit its global weight buffer either, and used a driver-side weight tiling
scheme. The end-to-end testbench runs a 64-channel layer as two weight passes
over the same inputs. `tb_workload_layers` implements this splitting
generally and runs one convolution layer from each evaluated network. The
layer shapes are those of the standard 224×224 ImageNet models. The data are
random, with zero point 128, and every output is checked:

| Layer | P × M × K | Passes × runs | Cycles |
|---|---|---|---|
| MobileNetV1 last pointwise conv | 49 × 1024 × 1024 | 4 × 1 | 340,553 |
| MobileNetV2 last 1×1 conv | 49 × 1280 × 320 | 2 × 1 | 140,005 |
| InceptionV1 3a 3×3 branch | 784 × 128 × 864 | 1 × 6 | 401,000 |
| ResNet18 conv1, first 1024 of 12,544 pixels | 1024 × 64 × 147 | 1 × 2 | 56,324 |
| ResNet18 layer4 3×3 conv | 49 × 512 × 4608 | 11 × 4 | 947,842 |

These cycle counts include streaming every word over the four 32-bit input
links, one word per link per cycle. For the small 7×7 layers with large
weights, loading the weights still costs more cycles than computing. This agrees with the
original observation that host-to-accelerator transfers became the bottleneck
until every AXI port was used.

Depthwise convolutions are not GEMMs in TFLite and stay on the CPU.

## Departures and choices

* **Only the systolic-array design.** The original case study also built a
  Vector MAC design: four SIMD GEMM units of 4×4 outputs with four MACs and an
  adder tree per output, a PPU per unit and an output crossbar. That design is
  not included here.
* **Four links in, one out.** The original design spread its transfers over
  all four high-performance AXI ports of the Zynq, but does not say how. Here
  the four input links split rows by row number mod 4, and each link writes
  its own four banks. Results leave on a single 32-bit stream, since the PPU
  produces one word per cycle.
* **Sizes and formats are chosen here.** This covers the buffer depths, the
  queue depth (8 words), the packet format and data layout, the 9-bit operands
  and per-layer requantization. The original work gives none of them.
* **Timing.** The PPU evaluates its arithmetic in one combinational stage: a
  32-bit add, a 32×32 multiply, a shift and a clamp. That stage sits before the
  output register. The MAC units multiply and accumulate in one cycle. An FPGA
  build at the 100–200 MHz typical of such boards would probably want the PPU
  pipelined. No clock frequency is assumed anywhere.
* **Reset** is asynchronous and active low. Buffer and queue contents are not
  reset.
* **Handshake rules are checked by assertions.** Three are in the RTL:
  no pop from an empty queue (`data_queue`), no push into a full queue
  (`scheduler`), and output data held stable under back-pressure (`ppu`).

## Simulating

Every testbench is self-checking. It prints one `TB_RESULT checks=… failures=…`
line and stops itself if it runs too long. Build and run with Verilator 5 from
the directory that holds `rtl/` and `tb/`, for example:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/secda_pkg.sv \
          tb/tb_secda_sa_top.sv --top-module tb_secda_sa_top -Mdir obj -o sim
./obj/sim
```

| Testbench | What it checks |
|---|---|
| `tb_mac_unit` | forwarding and accumulation against a reference, clear, hold when not stepped, extreme operands |
| `tb_systolic_array` | six random tiles with K from 1 to 64 and random stalls; every accumulator, and K + 2N − 1 steps |
| `tb_data_queue` | element order, level and full/empty behaviour under random push and pop, flush |
| `tb_global_buffer` | four write ports at once, all 16 banks read in parallel, read latency, output held without a read |
| `tb_input_handler` | configuration decoding, bank/address of every weight, input and bias word, start pulse, `RUN` waiting for the other links, stream held while busy |
| `tb_scheduler` | scheduler with real buffers, queues and array (N = 8) and a random PPU ready; tile order, biases, every accumulator, steps per tile, both stall kinds |
| `tb_ppu` | gemmlowp output stage against a 64-bit reference, saturation case, word order, `m_tlast`, one word per cycle |
| `tb_workload_layers` | five real layer shapes (table above) at the default size, with the driver's weight-pass and pixel-run splitting and K padding; every output byte checked; runs in about 30 s |
| `tb_secda_sa_top` | the whole accelerator at its default size, driven packet by packet on all four links as a host driver would. Three layers (K = 64, 4, 128), including one computed in two weight passes; every output byte is checked; array steps are counted. Each mechanism must occur: queue stall, PPU stall, output back-pressure, input held during a run, links transferring at once, multi-tile runs, weight reload |

To change the array size, override `N` on `secda_sa_top`. The buffers, queues
and scheduler follow it. The PPU requires `N` to be a multiple of 4.
