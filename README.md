# A CNN accelerator for per-pixel hyperspectral image classification

A hyperspectral image gives every pixel a spectrum of one to two hundred and
more bands. Classifying a pixel means assigning it a land-cover or material
class from its own spectrum and its spatial neighbourhood. The network
implemented here is a variant of BASS-Net that was reshaped for hardware. It
takes a small cube around the pixel (3x3 or 5x5 pixels by Nc bands). Every
convolution in it is either a 3x3 or a 1x1 kernel, so one kind of
convolution engine serves all layers. Each classification runs entirely in
on-chip memory: only the input cube and the weights come from off-chip DDR.
The weights of the next layer are fetched while the current layer computes.

This RTL describes the programmable-logic part of such an accelerator, for a
Zynq-class FPGA running at 250 MHz. The processor on the Zynq writes the
layer parameters into it and prepares the weight images in DDR. Both are
outside this RTL.

## 1. The network

One classification runs three stages on a `p x p x Nc` input cube:

| stage | layer | operation | shape for 5x5x220, Nb = 4 |
|---|---|---|---|
| Block 1 | conv | 3x3 conv (5x5 patch) or 1x1 conv (3x3 patch), Nc -> Nc filters, ReLU | 5x5x220 -> 3x3x220 |
| split | none | flatten the 3x3 positions to 9 rows and cut the Nc bands into Nb equal bands | Nb images of 9 x 55 x 1 |
| Block 2 | 4 conv | per band, weights shared by all bands: 3x3 conv 1->2->4->4->4 channels, ReLU | 9x55x1 -> 7x53x2 -> 5x51x4 -> 3x49x4 -> 1x47x4 |
| concat | none | the Nb band outputs form one vector | 4 x 188 = 752 |
| Block 3 | FC | 752 -> 120, ReLU | |
| Block 3 | FC | 120 -> K class scores | K = 9 |
| decision | none | class with the largest score (the softmax maximum) | |

The four benchmark scenes use these shapes:

| scene | Nc | patch | Block 1 | Nb | K |
|---|---|---|---|---|---|
| Indian Pines | 220 | 3x3 | 1x1 | 4 | 11 |
| Salinas | 224 | 3x3 | 1x1 | 8 | 16 |
| KSC | 176 | 5x5 | 3x3 | 8 | 13 |
| Botswana | 144 | 5x5 | 3x3 | 8 | 14 |

The hardware knows nothing of this structure. It runs a list of up to 8
layers. Each layer is a 3x3 convolution, a 1x1 convolution or a fully
connected layer, described by a descriptor (section 4). The testbenches
build the list above for every configuration.

Numbers are 16-bit fixed point, Q8.8 (8 integer and 8 fraction bits, two's
complement). Products are Q16.16. They are summed exactly in 40-bit
accumulators, which start at `bias << 8`. Each result is shifted right by 8
(rounding toward minus infinity) and clipped to 16 bits. ReLU then applies if
the layer asks for it.

## 2. Architecture

```
            register port                      DDR read port
                 |                                   |
          +--------------+   requests      +-----------------+
          | control_unit |---------------->|     loader      |
          +--------------+                 +-----------------+
            | descriptor, start               |input     |weights
            v                                 v          v
          +--------------+  9 read ports  +--------+  +---------------+
          | layer_engine |<-------------->| fbuf 0 |  | weight_buffer |
          |  (addresses, |<-------------->| fbuf 1 |  | bank 0/bank 1 |
          |  write-back) |   1 write port +--------+  +---------------+
          +--------------+        | window (9 x 16 bit)     | weight word
             | token flags        v                         v (576 x 16 bit)
             +------------> conv_unit: 64 kernels x (9 multipliers + adder tree)
             +------------> fc_unit:   256 multiply-accumulate lanes
                                  | accumulators -> requant -> write-back
          class_select: arg-max over the K scores of the last layer
```

| module | role |
|---|---|
| `hsi_pkg` | shared types: layer descriptor, loader request, Q8.8 constants |
| `conv_kernel` | 9 multipliers, adder tree, 9 accumulators; 1x1 mode bypasses the tree |
| `conv_unit` | P_C = 64 kernels sharing one input window, one output filter each |
| `fc_unit` | P_F = 256 lanes, one weight-matrix row each, one input element broadcast per cycle |
| `requant` | accumulator -> Q8.8: shift, saturate, ReLU |
| `feature_buffer` | 8192 x 16-bit bank, 9 synchronous read ports, 1 write port; two instances |
| `weight_buffer` | two banks of 1024 words x 576 lanes x 16 bit |
| `loader` | DDR -> feature bank 0 (input cube) or a weight bank (weights) |
| `layer_engine` | runs one layer: loops, addresses, tokens to the units, write-back |
| `control_unit` | register file, load schedule with pre-fetch, layer sequencing |
| `class_select` | reads the K scores and reports the arg-max |
| `hsi_accel_top` | wires the above together |

The multiplier count matches the reported DSP use of the original
implementation: 64 x 9 + 256 = 832.

### The CONV kernel and its 1x1 mode

In 3x3 mode a kernel multiplies a 3x3 window of one input channel by the
nine taps of one filter. The adder tree reduces the nine products to one
term, and that term is accumulated over the input channels. A 1x1
convolution needs one multiplier per output pixel and channel. For it the
tree is bypassed: the nine multipliers take the nine pixels of a 3x3 block of
the image, all with the same weight, and keep nine separate sums. So in 1x1
mode a kernel makes nine outputs per pass, and the unit performs 9 x 64 MACs
per cycle. For a 3x3 input patch with a 1x1 Block 1, one pass covers the
whole patch.

The 64 kernels receive the same window, and kernel k computes filter
`64*b + k` of filter block b. Layers with fewer than 64 filters (all of
Block 2) leave the other kernels idle.

### The FC unit

Lane l holds the running dot product of weight-matrix row `256*b + l` with
the input vector. Each cycle the engine broadcasts one input element, and
every lane multiplies it by its own weight from the current weight word.

## 3. Data flow of one classification

The control unit follows this schedule:

```
loader : [input] [W0] [W1]......           [W2]       [W3] ...
engine :               [layer 0 ..........][layer 1 ..][layer 2 ...
```

1. The loader fetches the input cube into feature bank 0, then the weights
   of layer 0 into weight bank 0 and those of layer 1 into bank 1.
2. Layer L starts when layer L-1 has finished and its own weights are
   complete. It reads feature bank L%2, writes feature bank (L+1)%2 and reads
   weight bank L%2.
3. The weights of layer j may be fetched once layer j-2 has finished, because
   that layer was the last user of bank j%2. While layer L computes, the
   weights of layer L+1 stream into the other bank.
4. After the last layer, `class_select` reads the K scores (at addresses
   0..K-1 of the final bank) and raises `done` with `label`, `best` and
   `scores`.

The register `stall_cycles` counts cycles in which a layer is ready to start
but waits for its weights. `overlap_cycles` counts cycles in which a weight
transfer runs during computation.

### Inside a layer

`layer_engine` loops over bands (groups), then filter blocks (64 filters, or
256 FC rows), then output positions, then input channels. The innermost loop
is one *pass*:

* Token 0 reads the bias word. The kernels load `bias << 8` into their
  accumulators.
* Tokens 1..cin each read one weight word. Each reads nine features (3x3
  window or 3x3 pixel block) or one feature (FC, port 0) of one input
  channel.
* Memory data reaches the units one cycle after the token. The unit's
  result follows two cycles later (a product register, then the
  accumulator).
* Write-back then stores the results of the pass into the destination bank,
  one per cycle: `nv` values, or `9*nv` for 1x1 with pixels outside the
  image skipped, where `nv` is the number of filters in the block. The
  value passes through `requant` on the way.

A pass therefore takes `(cin + 1) + 3 + write-back` cycles. Write-back does
not overlap the next pass.

### Tensors as strided views: split and concatenation for free

Every tensor element (row r, column c, channel k) of band g sits in a feature
bank at

    address = g*gs + r*rs + c*cs + k*ks

The descriptor gives the strides separately for input and output. The split
and flatten between Block 1 and Block 2 thus become a choice of strides, with
no data moved. Block 1 writes its `3x3xNc` output position-major
(`rs = 3*Nc, cs = Nc, ks = 1`). Block 2 reads band g as a `9 x Nc/Nb` image
with `rs = Nc, cs = 1, gs = Nc/Nb`: image row = spatial position, image
column = band-local spectral index. Each Block 2 layer writes band g at
offset `g*gs_out` in `[row][col][channel]` order. The last one makes
`gs_out` equal to the size of one band's output, so the Nb outputs are
already one contiguous vector for the FC layer. The testbench file
`tb/hsi_net_common.svh` (`run_net`) lists the descriptors of the whole
network.

## 4. Programming interface

### Register port

`cfg_we`, `cfg_addr[7:0]` and `cfg_wdata[31:0]` take one write per cycle.
Writes are ignored while a run is in progress.

| address | register |
|---|---|
| 0 | bit 0 = 1 starts a run |
| 1 | number of layers (1..8) |
| 2 | DDR beat address of the input cube |
| 3 | input length in features |
| 4 | number of classes K (1..16) |
| 32 + 16*L + f | field f of layer L |

Layer fields (each 16 bits unless noted):

| f | field | f | field |
|---|---|---|---|
| 0 | bits 1:0 kind (0 = 3x3 conv, 1 = 1x1 conv, 2 = FC), bit 4 ReLU | 8 | in_rs |
| 1 | in_h (FC: 1) | 9 | in_cs |
| 2 | in_w (FC: 1) | 10 | in_ks |
| 3 | cin (FC: input length) | 11 | out_rs |
| 4 | cout (FC: output length) | 12 | out_cs |
| 5 | groups (bands sharing the weights) | 13 | out_ks |
| 6 | in_gs | 14 | DDR beat address of the weights (32 bit) |
| 7 | out_gs | 15 | w_lanes: values per weight word in DDR |

A 3x3 layer produces `(in_h-2) x (in_w-2)` outputs per band. A 1x1 layer
produces `in_h x in_w`.

### Weight image in DDR

A layer's weights are a sequence of *weight words*. Filter block b (filters
`64b..64b+63`, or FC rows `256b..256b+255`) takes words
`b*(cin+1) .. b*(cin+1)+cin`:

* word `b*(cin+1)` holds the biases;
* word `b*(cin+1) + 1 + ci` holds the weights of input channel `ci`.

Lane placement inside a word, for filter or row k of the block:

| layer | weight lanes | bias lane |
|---|---|---|
| 3x3 conv | 9k + 3*dy + dx | 9k |
| 1x1 conv | k | k |
| FC | k | k |

In DDR each word occupies `w_lanes / 8` consecutive 128-bit beats. Lane i is
bits `16*(i%8) +: 16` of beat `i/8`. Choose `w_lanes` as the number of lanes
actually used, rounded up to a multiple of 8: 576 for a 3x3 layer with 64 or
more filters, 24 for a 3x3 layer with 2 filters, 64 for a 1x1 layer, 120 for
an FC layer of 120 rows. Narrow layers then cost no DDR bandwidth for unused
lanes. The control unit computes the word count,
`ceil(cout/64 or 256) * (cin+1)`. The input cube is packed 8 features per
beat, in the order of the first layer's input strides.

### DDR read port

`ddr_req_valid`/`ddr_req_ready` carry a burst request with a beat address
and a beat count. The beats then return in order on `ddr_rvalid`, with
`ddr_rready` as back-pressure. Weight beats are absorbed every cycle. Input
beats are unpacked at one feature per cycle. One request is outstanding at a
time.

### Clock and reset

A single clock drives the whole design; the target is 250 MHz. `rst_n` is
active low and asynchronous. It clears the control state and all handshake
outputs. The memories are not cleared: each run writes every location it
later reads.

### Result

`done` pulses for one cycle. `label` is the index of the first maximal
score, `best` its value and `scores[0..K-1]` the Q8.8 scores. They hold until
the next run reaches its classification stage.

## 5. Sizes and parameters

| parameter | default | meaning |
|---|---|---|
| `P_C` | 64 | CONV kernels (9 multipliers each) |
| `P_F` | 256 | FC lanes |
| `FDEPTH` | 8192 | words per feature bank (largest tensor: 5x5x220 = 5500) |
| `WDEPTH` | 1024 | weight words per bank (largest layer: Block 1 of 5x5x220, 4 x 221 = 884) |
| `BEAT_W` | 128 | DDR data width |
| `MAX_LAYERS` | 8 | descriptors |
| `MAX_CLASSES` | 16 | scores kept |

`P_C`, `P_F`, and the 16-bit width come from the original design. The other
sizes are chosen to fit the largest configuration above (all five fit; see
section 7 for the checks). Two weight banks of 1024 x 576 x 16 bits come to
about 18.9 Mbit of storage. That is more block RAM than the original
implementation reports using, so a real device would need a smaller bank and
a finer-grained weight stream for the 3x3 Block 1.

## 6. Where this RTL departs from, or goes beyond, the original design

The original description gives the block diagram, the kernel structure (9
multipliers + adder tree, 1x1 by bypassing the tree), the parallelism (64
kernels, 256 FC multipliers), the 16-bit fixed-point format, the layer-ahead
weight pre-fetch and the network shapes. Everything else is this design's
own choice:

* **Kernel parallelism over filters only.** The original uses its kernels
  "for parallel channel and filter processing" without giving the split.
  Here each kernel is one filter. This wastes most kernels in Block 2
  (2 or 4 filters).
* **Serial write-back.** Results are written one per cycle after each pass.
  For a 1x1 Block 1 with 220 filters, that is 9 x 220 writes against 4 x 221
  compute cycles.
* **Layer-granular pre-fetch into two full-layer banks.** This follows the
  original timing diagram literally. See section 5 for the storage it
  implies. The original argues that weights, being used once, need no
  buffering. That holds only if the loops run over output positions inside
  each weight word. Here the position loop is outside the channel loop, so
  every weight word is read once per output position. A whole layer must
  therefore stay on chip.
* **Q8.8 split, truncating shift, saturation, 40-bit accumulators, biases.**
  None of these is specified.
* **Softmax.** The network ends in a K-way softmax. Only the arg-max is
  computed, which gives the same class; the probabilities are not produced.
* **Interfaces.** The register map, the DDR port protocol and its 128-bit
  width are invented here.
* **Patch extraction** (cutting the cube around each pixel) is left to the
  processor.
* **Configuration conflict in the original.** Its network table shows a
  5x5x220 patch with a 3x3 Block 1, Nb = 4 and 9 classes. Its dataset table
  gives the 220-band scene (Indian Pines) a 3x3 patch, a 1x1 Block 1 and 11
  classes. Both are supported and both are simulated. The hidden FC size of
  120 appears only in the network table and is used for all scenes.

### Speed

Measured in simulation, with random weights and a DDR model that has a 10-cycle
read latency and randomly idles on about a quarter of the beat cycles:

| configuration | cycles per pixel | us per pixel at 250 MHz | original reports |
|---|---|---|---|
| 5x5x220, Nb = 4 (network table) | 144973 | 580 | none |
| Indian Pines | 58373 | 233 | 25.2 |
| Salinas | 54795 | 219 | 26 |
| KSC | 91911 | 368 | 16.4 |
| Botswana | 73660 | 295 | 11.2 |

This design is 8 to 26 times slower than the original reports. The
`stall_cycles` counter splits the time. Waiting for weights over the assumed
128-bit port takes 38 % of the cycles for Indian Pines, 37 % for Salinas,
64 % for KSC and 64 % for Botswana. The 3x3 Block 1 of KSC alone holds 280k
weights. Most of the remaining time goes to Block 2. Its layers have only 2
or 4 filters, so most of the 64 kernels sit idle. Each pass also adds three
pipeline cycles and a serial write-back to only one or a few input channels
of work. The results do not depend on these choices. `BEAT_W`, the DDR
width, is a parameter, and it sets how much of the weight transfer the
pre-fetch can hide.

## 7. Verification

Each module has a self-checking testbench in `tb/`. Each compares against
values computed independently in the testbench and prints
`TB_RESULT checks=N failures=M`:

| testbench | what it checks |
|---|---|
| `conv_kernel_tb` | random 3x3 and 1x1 passes against direct sums; 2-cycle result latency |
| `conv_unit_tb` | 4 kernels, lane layout of both modes |
| `fc_unit_tb` | 8 lanes, dot products with bias |
| `requant_tb` | shift, saturation, ReLU corner cases and random values |
| `feature_buffer_tb` | 9 read ports against a reference memory |
| `weight_buffer_tb` | lane-offset writes, bank independence |
| `loader_tb` | input unpacking (odd lengths), weight word/lane placement, DDR request, no back-pressure on weights |
| `layer_engine_tb` | banded 3x3 with a partial second filter block, 1x1 with edge tiles, 2-block FC: whole destination bank compared, exact cycle count |
| `control_unit_tb` | descriptor programming, order and timing of loads and layer starts, stall and overlap counters |
| `class_select_tb` | arg-max with ties, latency n+3 |
| `hsi_accel_top_tb` | two reduced networks end to end; requires every mechanism (1x1 and 3x3 Block 1, bands, two filter blocks, FC, ReLU clipping, pre-fetch overlap, weight stall, DDR wait) to occur |
| `hsi_full_tb` | the 5x5x220, Nb = 4 network of section 1 at full size |
| `hsi_datasets_tb` | the four scene configurations |

The end-to-end testbenches share `tb/hsi_net_common.svh`. It builds the
network, packs random weights into the DDR model (`tb/ddr_model.sv`,
behavioural), evaluates the network with plain nested loops, and compares
the class scores, the label and the hidden FC layer bit for bit. The weights
are random, not trained, so classification accuracy cannot be checked.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
    -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module hsi_full_tb rtl/hsi_pkg.sv tb/hsi_full_tb.sv
./obj_dir/Vhsi_full_tb
```

Replace `hsi_full_tb` with any testbench name from the table above. The
testbenches use loose integer widths, so `-Wno-fatal` keeps Verilator's width
warnings from stopping the build. The RTL itself builds without
width warnings. A passing run ends with `TB_RESULT checks=N failures=0`.

`hsi_full_tb` simulates about 145k cycles and takes roughly 40 seconds.
`hsi_datasets_tb` takes about ten seconds.
