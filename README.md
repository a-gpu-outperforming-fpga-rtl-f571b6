# A streaming binary-CNN accelerator

This is synthesizable SystemVerilog for an FPGA-style accelerator for a
binary convolutional neural network (BCNN). In a BCNN both the weights and the
activations are +1 or −1. The accelerator is built for the 9-layer CIFAR-10
classifier: six 3×3 convolution layers, three fully-connected layers, and
32×32 RGB images as input. The design rests on three ideas:

* **Multiplication becomes XNOR.** Encode +1 as bit 1 and −1 as bit 0. A
  product of two binary values is then the XNOR of their bits. A dot product
  is the number of bits that agree (a bit count). No multipliers are needed
  after the first layer.
* **Normalisation becomes one comparison.** Batch normalisation, the sign
  function and the step from a 1/0 count back to a ±1 sum are all monotonic.
  Together they reduce to one test per output: `bit = (count >= c)`. Here `c`
  is an integer threshold worked out offline for each output channel.
* **Every layer has its own hardware, and all layers run at the same time.**
  Between two layers sits a double-buffered feature-map memory. During one
  *phase*, layer L works on image i while layer L+1 works on image i−1. When
  every layer has finished, all buffers swap. One image leaves the pipeline
  per phase, and a phase lasts as long as the slowest layer. Weights,
  thresholds and feature maps all stay on chip.

At the default sizes every convolution layer from 2 to 6 needs 12 288 cycles
per image, and layer 1 needs 4 096. One image is therefore finished every
≈12.3 k cycles, whatever the batch size.

## 1. The network and its arithmetic

| layer  | input        | operation                             | output       |
|--------|--------------|---------------------------------------|--------------|
| CONV-1 | 3×32×32, 6-bit signed | 3×3 conv, 2-bit signed weights, threshold | 128×32×32 bits |
| CONV-2 | 128×32×32    | 3×3 binary conv, 2×2 max-pool, threshold | 128×16×16 |
| CONV-3 | 128×16×16    | 3×3 binary conv, threshold            | 256×16×16    |
| CONV-4 | 256×16×16    | 3×3 binary conv, max-pool, threshold  | 256×8×8      |
| CONV-5 | 256×8×8      | 3×3 binary conv, threshold            | 512×8×8      |
| CONV-6 | 512×8×8      | 3×3 binary conv, max-pool, threshold  | 512×4×4      |
| FC-1   | 8192 bits    | binary fully connected, threshold     | 1024 bits    |
| FC-2   | 1024 bits    | binary fully connected, threshold     | 1024 bits    |
| FC-3   | 1024 bits    | binary fully connected, `y − c`       | 10 scores    |

All convolutions use stride 1 and one pixel of padding. For a binary layer
whose sum covers `cnum` bits, the count `y` (number of agreeing bits) relates
to the ±1 sum as `sum = 2y − cnum`. With batch-norm parameters μ, σ, γ, β the
output bit is 1 exactly when `y >= c`, where
`c = round((cnum + μ − β·sqrt(σ²+ε)/γ) / 2)` (for γ > 0). The hardware
stores only `c`.

Max-pooling is applied to the integer counts, before the comparison. Because
the comparison is monotonic, this gives the same bits as pooling after it.

The first layer takes the image rescaled to 6-bit signed integers in
[−31, 31]. Its weights are 2-bit signed. It computes ordinary integer dot
products and then applies the same threshold test.

The output layer is not binarised. It reports `z = y − c` for each class, and
the class with the largest score wins. The arg-max is left to the host.

## 2. Phases, memory channels and the image stream

This part is the least obvious, so here it is in detail.

```
 host ──► image_channel ──► CONV-1 ──► ch1 ──► CONV-2 ──► ch2 ──► … ──► FC-3 ──► scores
              (2 banks)                (2 banks)          (2 banks)
                    ▲                       ▲                  ▲
                    └──────── phase bit from phase_ctrl ───────┘
```

* Every channel (`fmap_channel`, or `image_channel` at the input) holds two
  banks. During a phase the layer in front writes bank `phase`, and the layer
  behind reads bank `~phase`.
* `phase_ctrl` pulses `start` to all nine layers at once. Each layer raises
  `done` when its last write has gone out. When all nine are done, the
  controller flips `phase`, so every bank just written becomes a bank to read.
  Then the next phase starts.
* An image committed during phase k is read by CONV-1 in phase k+1 and by
  CONV-2 in phase k+2. Its scores come out at the end of phase k+9. Up to
  nine images are in flight at once.
* A valid tag per layer (`vtag`) follows each image through the pipeline.
  The output scores are copied to `scores`, and `out_valid` pulses, only at a
  swap where FC-3 held a real image.

**Host protocol.** Load the weights and thresholds first (section 5). Then,
for each image:

1. Wait for `img_ready`.
2. Write the pixels with `img_wr_en`, `img_wr_row`, `img_wr_col` and
   `img_wr_pix`. They go into the free bank.
3. Pulse `img_commit`.

While `run` is high, a phase does not end until the next image has been
committed. If the host is late, the pipeline stalls, and `stall_cycles`
counts the wait. Once the last image is committed, drop `run`. The pipeline
then keeps swapping with empty slots (bubbles) until every image has left,
and goes idle. A commit while `img_ready` is low is illegal; an assertion in
`phase_ctrl` flags it.

The phase length is the slowest layer's step count plus about 11 cycles: the
pipeline drain, the `done` handshake and the swap. At the defaults that is
12 299 cycles.

## 3. Inside a binary convolution layer (`bconv_layer`)

The filter is unfolded along its width and depth. One processing element
(PE, `xnor_pe`) XNORs UF = 3·D bits (three pixels × D channels) and counts
the ones. P = W PEs run side by side, one per output column, and all of them
use the same weight word. One **step** handles the triple (output channel n,
output row y, filter row fh):

* It reads input row `y+fh−1` from the channel. Rows outside the map read as
  all zeros.
* It reads weight word `n·3+fh`.
* PE p sees the pixels `p−1, p, p+1` of that row. The padded pixels at
  either end are zeros.

P accumulators add the three filter rows. So after three steps a full output
row of channel n is ready. A phase takes `DEP·H·3` steps, one per cycle:
128·32·3 = 12 288 for CONV-2, and the same for CONV-3 to CONV-6.

Pipeline:

| stage | what happens |
|-------|--------------|
| S0 | loop counters; row read address, weight address `n·3+fh`, threshold address `n` |
| S1 | input row registered; weight and threshold memories deliver (synchronous read) |
| S2 | PE counts registered |
| S3 | accumulators deliver a full sum after `fh = 2` |
| S4 | pooling layers only: the MP kernel buffers the even row and emits the 2×2 maxima on the odd row |
| NB | comparator bits registered; written to the next channel at (row y or y/2, channel n) |

**Padding.** The binary encoding has no zero, so padded pixels read as −1
(bit 0). The network's definition has 0 there. The thresholds can absorb this
constant shift only approximately at the border (see section 7).

`fpconv_layer` (CONV-1) has the same outline, with two differences. One
fixed-point PE (`fp_pe`) covers the whole 3×3×3 window (UF = 27), and there
is no accumulator. It computes one output row per cycle, 128·32 = 4 096
cycles per phase. Image padding is a true zero.

## 4. Fully-connected layers and output (`bfc_layer`)

A fully-connected layer reads its input vector as R rows of UF bits. For
each output neuron n it spends R steps: one XNOR PE against weight word
`n·R+r`, then an accumulator over the rows.

| layer | R | UF   | outputs | cycles per phase |
|-------|---|------|---------|------------------|
| FC-1  | 4 | 2048 | 1024    | 4 096 |
| FC-2  | 8 | 128  | 1024    | 8 192 |
| FC-3  | 8 | 128  | 10      | 80    |

FC-1 reads the 4×4×512 output of CONV-6 one map row at a time. The flattening
order is therefore (row, column, channel). A hidden FC layer writes neuron n
into its output channel at row `n / 128`, bit `n % 128`. FC-3 subtracts the
class threshold (`norm_unit`) and writes the 10 signed 16-bit scores.

## 5. Memory layout and the load port

Each layer has a weight memory and a threshold memory (`bank_mem`). A
weight word of UF bits is split into ⌈UF/32⌉ banks of 32 bits. All banks
share one address and are read in the same cycle, so each bank can be a
plain 32-bit block RAM.

The load port `ld` (type `bcnn_pkg::ld_req_t`) writes one 32-bit slice per
cycle. Its fields are:

* `en`
* `layer`: 0 = CONV-1 … 8 = FC-3
* `thr`: 0 = weights, 1 = thresholds
* `bank`: which 32-bit slice of the word
* `addr`: word address
* `data`

| layer | weight word address | bit of the word | threshold address |
|-------|---------------------|-----------------|-------------------|
| CONV-1 | n (filter) | term k = fh·9 + fw·3 + c at bits `[2k +: 2]`, two's complement | n |
| CONV-2…6 | n·3 + fh | `fw·D + d`: filter column fw, input channel d | n |
| FC-1…3 | n·R + r | bit i of input row r | n |

A threshold is a signed 16-bit value in the low half of its word. Image
pixels are written as `{b, g, r}` with channel c in bits `[6c +: 6]`.

At the defaults the weight memories hold 14.03 Mbit, the exact size of the
network's weights. The feature-map channels hold 2 × (131 072 + 32 768 +
65 536 + 16 384 + 32 768 + 8 192 + 1 024 + 1 024) bits in registers, plus two
6-bit 32×32×3 image buffers.

## 6. Performance of this RTL

| layer | steps per phase | published estimate / measured |
|-------|-----------------|-------------------------------|
| CONV-1 | 4 096  | 4 096 / 5 233 |
| CONV-2…6 | 12 288 | 12 288 / 12 296 … 14 473 |
| FC-1, FC-2, FC-3 | 4 096, 8 192, 80 | not published |

The simulated phase is 12 299 cycles. At the 90 MHz that the original FPGA
implementation reached, this would be about 7 300 images/s. The published
implementation reached 6 218 images/s; its slowest layer took 14 473 cycles.
This RTL does not model the clock rate.

## 7. Departures from the published design, and choices made here

Taken from the published design:

* the layer sizes
* the 1/0 encoding
* the threshold form of normalisation
* the first-layer number formats
* the per-layer UF and P of the convolution layers
* the PE structure (XNOR array plus bit-count tree)
* accumulators after the PEs
* a buffer in front of the max-pool units
* the double-buffered channels that swap when all layers are done
* weights split into 32-bit banks
* feature maps in registers

Chosen here:

* **Step order** inside a layer: (channel, row, filter row). One output row
  per step group, with P equal to the row width.
* **Padding** of binary layers with −1 (bit 0), not 0. Exact zero padding
  would need a per-position mask and a position-dependent threshold.
* **Output-layer normalisation** as `y − c`. The per-class scale of batch
  norm is not applied, so the scores rank classes correctly only when those
  scales are equal.
* **Fully-connected shapes**: R, UF, one PE per layer, and the flattening
  order.
* **Pool row buffer in registers**, not block RAM.
* **Accumulators** as plain adders, not DSP primitives.
* **Host interface**: the load port, the pixel write port, commit, run and
  flush. Also the stall and bubble behaviour and the valid tags.
* **16-bit integer width** for all sums and thresholds.
* **Reset**: control state and valid flags reset asynchronously (active
  low); datapath registers and memories are not reset.

Not modelled: FPGA resource mapping, clock rate, power, and arg-max.

## 8. Files

| file | contents |
|------|----------|
| `rtl/bcnn_pkg.sv` | shared widths and the load-port struct |
| `rtl/bcnn_top.sv` | the whole accelerator |
| `rtl/phase_ctrl.sv` | phase sequencing, bank swap, stall/flush, valid tags |
| `rtl/image_channel.sv`, `rtl/fmap_channel.sv` | double-buffered image and feature-map channels |
| `rtl/fpconv_layer.sv`, `rtl/bconv_layer.sv`, `rtl/bfc_layer.sv` | first, binary convolution and fully-connected layers |
| `rtl/xnor_pe.sv`, `rtl/fp_pe.sv` | binary and fixed-point PEs |
| `rtl/accumulator.sv`, `rtl/mp_kernel.sv`, `rtl/nb_kernel.sv`, `rtl/norm_unit.sv` | accumulator, row buffer + max-pool, threshold comparators, output normalisation |
| `rtl/bank_mem.sv` | partitioned weight/threshold memory |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/bcnn_tb_body.svh` | shared stimulus and reference model for the two end-to-end tests |
| `tb/tb_bcnn_top.sv` | end-to-end test at reduced sizes: five images, a stall, bubbles |
| `tb/tb_bcnn_top_full.sv` | end-to-end test at the default sizes: two images |

## 9. Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. For
example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl \
    rtl/bcnn_pkg.sv tb/tb_bcnn_top.sv --top-module tb_bcnn_top -Mdir obj_top
./obj_top/Vtb_bcnn_top
```

For any other module, replace `tb_bcnn_top` with `tb_<module>`.

* **Unit testbenches** recompute every output from its definition,
  independently of the RTL's structure, and check the cycle count of a
  phase.
* **End-to-end testbenches** load random weights and thresholds, with
  thresholds placed near the middle of each sum's range so that the bits
  vary. They stream random images and compare every score vector with a
  reference model of all nine layers. They also check that a stall, bubbles,
  max-pooling and bank swaps all happened, and that the phase length matches
  the slowest layer.
* **Run times.** The reduced test runs in well under a second. The
  full-size test takes about 12 minutes for verilator to build and about
  30 seconds to run; most of its cycles go to loading the 14 Mbit of weights
  through the 32-bit port. It measures a phase of 12 299 cycles: the
  12 288 steps of the slowest layers plus the pipeline drain and the swap.

To change the network size, set the `bcnn_top` parameters:

* `IMG`: image edge, a multiple of 8
* `C1`: channel count of CONV-1; the later layers double it twice
* `FCN`: width of the hidden FC layers
* `NCLS`: number of classes
* `FCR`: rows of the FC vectors; must divide `FCN`

`tb/tb_bcnn_top.sv` shows a small configuration.
