# A microcoded FCN accelerator for scene text detection

Scene text detectors built on fully convolutional networks (a backbone such as ResNet-50 or
VGG-16 for feature extraction, then a fusion network that merges the feature levels and ends in
1x1 sigmoid score maps) change often: different backbones and different input sizes. This
design handles that change with microcode instead of new hardware. Each layer of a network is
described by one 256-bit word. A short program of such words runs the whole network on fixed
hardware, reading and writing feature maps in external memory. Three independent modules do the
work:

* **feature extraction** (`fcn_engine`, 32 input lanes x 64 output lanes): 1x1, 3x3 and 7x7
  convolution, stride 1 or 2, 2x2 max pooling, ReLU, and residual (shortcut) cache and add;
* **feature fusion** (`fcn_engine`, 16 x 32 lanes, no 7x7): the same datapath, with a sigmoid
  in place of max pooling;
* **upsample** (`upsample`): nearest-neighbour 2x enlargement of a feature map.

A host writes microcode into a configuration RAM and sets registers (`pcie_regs`). A scheduler
(`task_scheduler`) then starts any subset of the three modules, which run at the same time. It
raises an interrupt once every module of the round has finished. The top level is `stdd_top`.

## Microcode

One word per layer (`stdd_pkg::microcode_t`, LSB first):

| bits | field | meaning |
|---|---|---|
| 1:0 | layer type | 0 conv, 1 pool (sigmoid in the fusion module), 2 upsample, 3 null |
| 3:2 | transpose, relu | bit 2 ReLU after the layer, bit 3 the image is stored transposed |
| 19:4 | input channels | |
| 35:20 | output channels | |
| 55:36 | height | input rows |
| 70:56 | width | input columns, up to 4096 |
| 72:71 | kernel | 0 1x1, 1 3x3, 2 7x7 |
| 73 | stride | 0 stride 1, 1 stride 2 |
| 75:74 | residual op | 0 none, 1 cache the result on chip, 2 add the cached result |
| 109:76 | input address | word address of the input map |
| 143:110 | output address | word address of the output map |
| 177:144 | weight address | start of the layer's weights (taken from the reserved field) |
| 255:178 | reserved | |

Layers are linked only through addresses. Concatenation is two layers writing to adjacent
regions. A layer with residual op 1 keeps its result in the on-chip residual cache and writes
nothing to memory. A later layer with residual op 2 adds the cached value to each output pixel
before ReLU. For a pooling layer, the pooled pixel is added instead. Upsample and null codes
are skipped by the FCN modules. A reserved kernel code, or a 7x7 kernel in the fusion module,
is skipped and sets the module's `error` output.

### Memory layout

* Feature maps are channel-major, then row-major, with one FP16 value per 16-bit word. The
  address of (c, y, x) is `base + c*H*W + y*W + x`.
* Weights are stored per output-channel group of N, then per input-channel group of M, then per
  kernel position. Each position is one exponent word (signed, low 8 bits) followed by N*M
  16-bit mantissas, output-lane major.
* For a 3x3 stride-1 layer, the 36 "positions" are the Winograd-domain kernels U = G g G^T,
  scaled to integers with a shared exponent. The engine uses the exponent of position 0 for
  all 36.
* The weights of a layer are stored once. They are re-read for every band of rows.

## The FCN module (`fcn_engine`)

### Loop structure

A layer is processed as

    for each output-channel group of N   (pooling: channel group of M)
      for each band of output rows that fits the partial-sum cache
        for each input-channel group of M
          load the group's weights into one half of the weight buffer
          for each output tile (4x4 for Winograd, one pixel otherwise)
            load the input window into one half of the input buffer
            compute and accumulate into the partial-sum cache
      drain the band: finish every pixel and send it to memory

A loader and a compute controller walk this same nest independently. The loader can run one
buffer half ahead, so memory reads overlap computation. Row bands follow the idea of
segmenting a large image by rows, so that any width up to 4096 fits a fixed on-chip cache. The
band height is the largest multiple of the tile height whose rows fit `PSUM_DEPTH` partial
sums.

### Two datapaths on one MAC array

The MAC array is M x N signed multipliers. Each cycle it multiplies an M-vector of input
mantissas with an N x M slab of weight mantissas and produces N sums.

* **Winograd F(4x4, 3x3)** is used for 3x3 stride-1 layers.
  1. The whole 6x6xM window is turned into block floating point as one block
     (`bfp_normalize`).
  2. Each channel goes through B^T X B (`winograd_input_transform`, adds only).
  3. The array runs 36 times, once per Winograd-domain position.
  4. Each output lane goes through A^T M A (`winograd_output_transform`).
  5. The 16 output pixels are accumulated one per cycle.

  This is 36 array cycles per 4x4 tile and input group, against 144 for direct computation.
* **Point-wise** is used for 1x1, 7x7 and strided 3x3 layers. Each kernel position's M-vector
  is normalised on its own and multiplied with that position's slab. This is one cycle per
  position and the pipeline is four stages deep.

### Number formats

* The input is FP16.
* Block floating point (`bfp_normalize`) uses a shared 5-bit exponent (the largest in the
  block). Each element is a signed 16-bit mantissa: a 15-bit magnitude shifted right by the
  element's exponent deficit and truncated.
* The array and the Winograd transforms are exact integer arithmetic.
* `fp16_transform` converts a result and its combined exponent (block exponent + weight
  exponent - 29) to a float with a 15-bit mantissa.
* Partial sums are accumulated in that wider format (`fpx_add`, truncating).
* A pixel is truncated back to FP16 only once, when it is finished. Keeping extra mantissa
  bits during the long accumulation is what holds the accuracy of deep networks.

### Post-processing (`post_process`)

Per output lane, the post-processor holds:

* the partial-sum cache (`acc_first` starts a sum);
* the residual cache, which is written in "cache" layers and added in "add" layers;
* a running 2x2 maximum for pooling;
* ReLU, or (fusion module) a piecewise-linear sigmoid (maximum error about 0.02).

One adder per lane is shared between accumulation and residual add.

### Buffers and memory traffic

The input, weight and output buffers are ping-pong (`pingpong_buffer`, `weights_buffer`). One
half is written while the other is read. Full and empty flags create back-pressure in both
directions.

* `dma_read` issues single-word reads with a tag saying where the word goes. Reads of the
  zero-padding border do not touch memory.
* `dma_write` writes each finished pixel's lanes to their channel planes.
* `bus_controller` merges the two streams round-robin onto the module's memory port.

### Transposed images

Widths above 4096 are handled by storing the image transposed and setting the transpose bit.
The weight buffer then reads each kernel transposed.

## System level (`stdd_top`)

* The host interface is a plain register port (`host_*`): 16 registers of 32 bits.
* The microcode download port (`cfg_*`) stands for the host DMA into the configuration RAM.

| reg | use |
|---|---|
| 0 | write: start bits {upsample, fusion, extraction} |
| 1 | status: busy[2:0], interrupt [8], error [18:16] |
| 2 | read: modules of the finished round; write: clear interrupt |
| 3 | interrupt enable |
| 4 / 5 | extraction / fusion microcode base [15:0] and count [31:16] |
| 6-7, 8-9 | upsample source / destination address |
| 10, 11, 12 | upsample channels, height, width |

* Each module has its own memory port, and so its own bus controller: `mem_req[0..2]`,
  `mem_ready`, `mem_rsp`, for extraction, fusion and upsample.
* A request carries valid, write enable, a 34-bit word address and 16-bit data. It is accepted
  when `mem_ready` is high.
* Read data returns in order, any number of cycles later, with `mem_rsp.valid`.

## Where this RTL departs from the published design

* **One clock.** The original runs the DSP array at twice the interface clock (320 MHz). Here
  everything shares one clock, so the array does one step per cycle.
* **Input windows are read word by word, once per tile.** Neighbouring tiles reuse no rows.
  Memory is accessed one 16-bit word at a time, not in bursts. Throughput is therefore well
  below the published 1.2-2.9 TOPS; this RTL shows function and structure, not speed.
* **Off-chip and software parts are outside the RTL.** The PCIe endpoint, DDR4 controller,
  host software and the tool that generates the microcode and weights are not included.
  Testbenches use a behavioural memory (`tb/ext_mem_model.sv`) with latency and random stalls.
* **Choices of this design:**
  - pooling is fixed at 2x2 stride 2;
  - the sigmoid is a piecewise-linear approximation;
  - upsampling is nearest-neighbour;
  - the Winograd path is used only for stride 1;
  - the register map and the meaning of a "round".
* **Default sizes.** The defaults are the published array sizes (32x64 and 16x32), a 4096-wide
  image limit and a 34-bit address. The partial-sum cache (16384 pixels of 64 lanes), residual
  cache (65536) and configuration RAM (1024 words) have no published size.

### Capacity at the defaults

* VGG-16 fits at input sizes 256 to 2048 square.
* ResNet-50 needs its residual cache to hold one 256-channel quarter-resolution map. At the
  default 65536 entries this works up to 512x512 inputs. Larger inputs need `RES_DEPTH`
  raised, or shortcut maps kept in external memory.

## Verification

Every block has a self-checking testbench `tb/tb_<block>.sv` that prints
`TB_RESULT checks=<n> failures=<n>` and stops on a watchdog. Run one with:

    verilator --binary --timing -Irtl -Itb -y rtl -y tb rtl/stdd_pkg.sv tb/tb_util_pkg.sv \
      tb/tb_conv_pkg.sv tb/tb_fcn_engine.sv --top-module tb_fcn_engine && obj_dir/Vtb_fcn_engine

Arithmetic blocks are checked against real-number references, with error bounds derived from
the number formats.

`tb_fcn_engine` runs a six-layer program on a reduced engine (4 x 8 lanes, 32-pixel
partial-sum cache). The program covers:

* a 1x1 conv;
* a Winograd 3x3 over two row bands with edge tiles;
* a strided 3x3 into the residual cache;
* pooling with residual add;
* a 7x7 conv;
* an illegal layer.

Every output is compared with a real-valued convolution. Memory has random stalls. The test
also checks the exact MAC-array cycle counts (36 per Winograd tile and input group, one per
kernel position otherwise).

`tb_stdd_top` runs the complete system at its default sizes (32x64 and 16x32 arrays). It
works through the register port and runs two rounds:

* Round one runs extraction, fusion and upsampling at the same time. Extraction runs four
  layers: 1x1, Winograd 3x3, strided 3x3 into the residual cache, and pooling with residual
  add. Fusion runs a sigmoid layer and a 7x7 layer that it must reject. Upsampling runs once.
* Round two runs the upsampler alone.

The test compares all outputs with the references. It checks the interrupt, the round status
and the error flags. It counts each mechanism and fails if one never occurs: Winograd and
point-wise array cycles, pooling, residual cache and add, sigmoid, upsample writes, concurrent
modules, memory stalls, ping-pong buffer stalls and the interrupt. Build time is a few
minutes; simulation takes seconds.

Each testbench has been run against a copy of its block with one deliberate bug, such as a
wrong transform index, an exponent off by one, missing back-pressure or a wrong address
stride. Every such copy made its testbench report failures.
