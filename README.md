# A cascaded low/high-precision CNN inference engine

Cutting the wordlength of a CNN makes an accelerator faster, but beyond some
point the accuracy drops too far. Suppose a 4-bit network is about twice as fast
as an 8-bit one and right on most images. Then the 8-bit answer is only needed
for the images where the 4-bit network is unsure. This design uses that idea,
following the CascadeCNN architecture (Kouris, Venieris and Bouganis). It has
three parts:

* a **low-precision unit (LPU)**, which runs every sample with 4-bit weights and
  activations on many processing elements;
* a **confidence evaluation unit (CEU)**, which measures how confident each
  LPU prediction is, using a generalised Best-vs-Second-Best score;
* a **high-precision unit (HPU)**, which runs the full network again in 8-bit
  arithmetic, but only for the samples the CEU rejected.

There is only one copy of the weights, stored at 8 bits in memory. The LPU
makes its 4-bit weights from these on the fly as it loads them. The cascade
therefore needs no more weight memory than a plain 8-bit design.

```
            +-----+  scores  +-----+  FAIL: sample list  +-----+
  memory -->| LPU |--------->| CEU |-------------------->| HPU |--> memory
            +-----+          +-----+                     +-----+
                                | PASS: class                | class (CEU top-1)
                                v                            v
                       one result per sample: (sample, class, which unit)
```

## How a batch flows

`cascade_ctrl` processes one batch (up to 256 samples) in four phases. Only
one unit owns the shared memory port at a time.

1. **LPU phase.** Each layer of the network runs on the LPU for the whole
   batch, one layer after the other.
2. **CEU phase.** For each sample, the CEU reads the last layer's scores and
   decides:
   * on PASS, the LPU's class is final and the result is output at once;
   * on FAIL, the sample number goes onto the *fail list*.
3. **HPU phase.** This phase runs only if the fail list is not empty. Each
   layer runs on the HPU, but the HPU's *sample list* is the fail list. The
   HPU therefore reads and writes only the rejected samples. It reuses the
   LPU's buffers and overwrites them, for those samples only.
4. **Read-out.** For each failed sample, the CEU is run again on the HPU's
   scores, and only its top-1 class is used. The result is flagged
   `res_hpu = 1`.

Results come out on `res_valid/res_sample/res_class/res_hpu`: the passed
samples first, in sample order, then the redirected ones. `n_fail` reports
how many samples needed the HPU.

## The confidence test

Sort the class probabilities of a prediction in decreasing order, giving
p1 ≥ p2 ≥ … The confidence is then

    gBvSB<M,N>(p) = (p1 + … + pM) − (pM+1 + … + pN)

A prediction PASSes when gBvSB ≥ th. M, N and th are run-time inputs
(`ceu_m`, `ceu_n`, `ceu_th`). For M = 1, N = 2 this is the classic
best-minus-second-best margin. In the source design they are tuned offline
on a small labelled set so as to meet an error budget.

The network produces integer scores, not probabilities, so the CEU has to
build the probabilities. It makes three passes over the scores, which sit in
memory as signed 8-bit values, 16 per word:

1. **Maximum.** It reads one word per cycle and finds the largest score
   `zmax`.
2. **Exponentials.** It handles one score per cycle. First it forms
   e_i = exp(−(zmax − z_i)/2^f). Here f (`*_logit_frac`) is the number of
   fraction bits of the scores. The value comes from a 256-entry table
   holding exp(−k/16) in Q0.16: entry 0 is 65535, and distances of 16 or more
   give 0. The table is computed at elaboration by repeated multiplication
   with round(e^(−1/16)·2^32), so the RTL contains no table data. Then e_i is
   added to the running sum S. Finally e_i is inserted into a sorted list of
   the NMAX = 8 largest values. The insertion uses one comparator per list
   slot and a shift, so it takes no extra cycles.
3. **Decision.** Since p_i = e_i / S, the test becomes the following, which
   needs no divider:

       (sum of the first M list entries − sum of entries M+1..N) · 2^16 ≥ th · S

`th` is signed Q1.16, so 65536 means 1.0. A negative threshold passes
everything, and a threshold above 1 rejects everything. One evaluation of C
classes (nw = ⌈C/16⌉ words) takes `nw + 1 + nw·18 + 2` cycles. That is
about 1,200 cycles for 1,000 classes, which is small next to a CNN layer.

Some limits follow from the table's resolution. Two scores closer than 1/16
of a unit get the same exponential. With `logit_frac > 4`, distinct scores can
therefore tie. On a tie, the lower class index wins `top1`.

## The matrix engine (LPU and HPU)

Both units are the same module, `mm_unit`, with different parameters. One
layer is one matrix product, C = A × W:

* A has one row per output pixel of a convolution, or one row per sample for a
  fully-connected layer;
* W is stored transposed, one weight column per output channel.

The engine has NUM_PE processing elements (`pe`). Each PE has LANES = 16
multipliers feeding a binary adder tree and an accumulator. Each PE computes
one output column, and one memory word (16 elements) goes into every PE each
cycle.

Schedule of one layer:

```
for each tile of NUM_PE output columns:
    LOADW   fetch the tile's weight columns into one bank per PE
            (kw words each), requantising every element to WL bits
    for each sample in the sample list:
        for each row of that sample:
            ROW, ADDR   clear accumulators, compute row addresses   (2 cycles)
            COMP        stream the row's kw words of A past all PEs  (kw cycles)
            CDRAIN      last product lands                           (1 cycle)
            WRITE       scale, ReLU, saturate to 8 bits, store
                        NUM_PE/16 words with lane masks              (NUM_PE/16 cycles)
```

A tile's weights are fetched once and then reused over every row of every
listed sample. This is the batch processing that lets fully-connected layers
reuse weights. The exact cycle count of a layer, from `start` to `done`, is

    Σ over tiles (nv·kw + 1 + ns·m·(kw + 3 + NUM_PE/16)) + 1

where nv is the number of valid columns in the tile, ns the number of listed
samples, and m the number of rows per sample. Memory reads are assumed to
return on the next cycle. A real DRAM interface would need buffering in front
of this port.

The weight banks hold KW_MAX = 1568 words per PE. That covers K up to 25,088,
the largest dot product of VGG-16 (its first fully-connected layer).

## One set of weights, two precisions

Every layer has its own dynamic fixed-point scaling, and each unit keeps its
own set of right shifts, packed as `{w_shift, a_shift, o_shift}`. These are
applied by `requant` (shift, round half up, saturate):

* **weights** (`w_shift`): as they are fetched from the 8-bit model. In the
  LPU this is what turns the shared 8-bit weights into 4-bit ones;
* **activations** (`a_shift`): as each A word is read;
* **outputs** (`o_shift`): as the 32-bit accumulators are written back to
  8 bits, after the optional ReLU.

Intermediate feature maps are always stored at 8 bits and brought to the
unit's wordlength when the next layer reads them. `sat_count` counts clipped
operands and results, which helps when choosing the shifts.

## Programming a network

The layer table (up to 16 layers) is written while the engine is idle, one
field at a time. Set `cfg_layer` and `cfg_field` and pulse `cfg_we`; the field
numbers are `cfg_field_e` in `cascade_pkg`. All addresses are word addresses,
and a word is 16 bytes.

| field | meaning |
|---|---|
| `kw` | K in words (K zero-padded to a multiple of 16) |
| `n` | output columns (channels or classes) |
| `m` | rows per sample (output pixels; 1 for FC) |
| `a_base`, `a_sstride`, `a_rstride` | row r of sample s of A is at `a_base + s·a_sstride + r·a_rstride` |
| `w_base` | column j of W is at `w_base + j·kw` (kw words) |
| `c_base`, `c_sstride`, `c_rstride` | output element j of row r of sample s: word `c_base + s·c_sstride + r·c_rstride + j/16`, lane `j%16` |
| `relu` | clamp negative outputs to 0 |
| `lpu_shift`, `hpu_shift` | `{w_shift[14:10], a_shift[9:5], o_shift[4:0]}` |

The CEU reads the scores of sample s at `c_base + s·c_sstride` of the last
layer, and the class count is that layer's `n`. Lanes beyond `n` are never
written, so zero the padding once and it stays zero. A layer can then read
the previous layer's rows flattened as a single row. The end-to-end testbench
does this: a 3×3, stride-2, padded convolution with 4 output pixels feeds a
classifier with K = 4×48.

### Convolution mode

A convolution layer sets `conv`. The engine then builds each A row itself:
row r is output pixel (oy, ox) = (r / out_w, r % out_w), and its kw words are
the im2col window in (ky, kx, channel word) order. The input feature map is
read in place, in HWC layout with `cw` words of channels per pixel:

    word = a_base + s·a_sstride + ((oy·stride − pad + ky)·in_w + (ox·stride − pad + kx))·cw + c

Taps that fall in the zero padding are not read and count as 0. Every tap
still costs one cycle, so the cycle formula above is unchanged. The weight
column of an output channel must use the same (ky, kx, c) order, and
kw must equal kh·kwd·cw. The output rows are the output pixels, in HWC order
again when `c_rstride` = ⌈n/16⌉, so the next conv layer can read them.

| field | bits | meaning |
|---|---|---|
| 13 `conv` | `[0]` conv, `[7:4]` kh, `[11:8]` kwd, `[15:12]` stride, `[19:16]` pad | window geometry (kernel up to 15×15) |
| 14 `in_hw` | `[15:0]` in_w, `[31:16]` in_h | input size in pixels |
| 15 `out_w_cw` | `[15:0]` out_w, `[31:16]` cw | output width; channel words per input pixel |

In convolution mode `a_rstride` is not used. Fields 13–15 are ignored when
`conv` = 0. A grouped convolution (as in the original two-tower AlexNet) cannot
read half of each pixel's channels in place. Each group's input has to be
stored as a separate map.

## Parameters

| parameter | default | origin |
|---|---|---|
| `LPU_WL` | 4 | the source design's LPU wordlength for VGG-16 and AlexNet |
| `HPU_WL` | 8 | the source design's accuracy reference is an 8-bit implementation |
| `LPU_PE`, `HPU_PE` | 32, 16 | chosen; the source leaves tile sizes to a per-FPGA roofline search |
| `LANES` (MACCs per PE) | 16 | chosen; also the memory word (16 × 8 bits) |
| `KW_MAX` | 1568 | chosen to fit VGG-16 fc6 (K = 25,088) |
| `MAX_LAYERS`, `MAX_BATCH` | 16, 256 | chosen (VGG-16 has 16 weight layers; batch fits a 200-image set) |
| `NMAX` | 8 | chosen, the largest N of gBvSB |

`NUM_PE` must be a multiple of `LANES`, and `LANES` a power of two.

## How this relates to the source design

The source design describes a three-part system of LPU, CEU and HPU, and
gives the following:

* the CEU's metric and its threshold rule;
* the matrix-multiplication unit, built from PEs of MACCs with an adder tree;
* a 4-bit LPU against an 8-bit reference;
* per-layer dynamic fixed point;
* run-time extraction of the LPU weights from the HPU's model.

The following are choices made here, where the source is silent:

* softmax via an exponential table, and the divider-free threshold test;
* rounding (half up) and saturation in every requantisation;
* the ReLU flag. The source does not mention non-linearities, but a CNN
  needs them;
* the loop order, weight banks, sample lists, memory layout and layer table;
* generating the convolution windows in the engine, so the lowered matrix is
  never stored. The source only says convolutions are cast as matrix
  multiplications;
* running the three stages one after the other over a batch, on one memory
  port. In the source, each unit may instead be mapped over a whole FPGA;
* every PE count and buffer depth;
* the accumulator behind each PE's adder tree, so a dot product longer than
  16 elements runs over several cycles. The source's PE drawing shows only
  the multipliers and the adder tree;
* how results leave the engine. In the source's block diagram, the CEU's
  PASS path and the HPU both lead to memory. Here both units' scores are in
  memory, and the final class of every sample comes out on the result port.

The following are not included:

* pooling layers, which the source does not map to the engine;
* more than the top-1 class per sample. The source reports top-5 accuracy;
  here the CEU outputs only the best class;
* the external memory itself (the testbenches use a behavioural model,
  `tb/ext_mem.sv`);
* the offline toolflow that picks wordlengths, scalings, tile sizes and
  M, N, th.

## Verification

Each module has a self-checking testbench that prints
`TB_RESULT checks=… failures=…`:

| testbench | what it checks |
|---|---|
| `tb_requant` | every 8-bit input × shifts 0..9 at 8→4 bits, random 32→8 bits, against real-valued rounding |
| `tb_pe` | random dot products of random length, 8-bit/16-lane and 4-bit/8-lane, idle cycles, clear |
| `tb_lpu`, `tb_hpu` (via `mm_check`) | random FC and convolution layers (random kernel, stride, zero padding) over several column tiles, sparse sample lists, ReLU, shifts, against a reference matrix product; untouched neighbouring lanes and samples; exact cycle count; saturation count |
| `tb_ceu` | random score vectors against a real-valued softmax/gBvSB (cases within 10⁻³ of the threshold not judged); top-1; exp table; exact cycle count |
| `tb_cascade_ctrl` | sequencing against stand-in units: layer order, shifts, CEU addresses, fail-list compaction, HPU skipped when nothing fails, one result per sample |
| `tb_cnn_layers` | real VGG-16 layers (conv1_1, conv3_2, conv5_3, fc6 with 32 of its 4,096 columns but the full K = 25,088, fc8) and AlexNet layers (11×11 stride-4 conv1, 5×5 padded conv2), with cropped feature maps, on the LPU and HPU configurations at their default sizes; every output against an integer reference; exact cycle counts; at least a third of the outputs neither zero nor clipped |
| `tb_cascade_top` | the whole engine at its default parameters on a two-layer network (a 3×3 convolution with padding, then a classifier). It checks both 4-bit and 8-bit forward passes against a bit-accurate model, on a 200-sample batch (the size of the source's evaluation set) run three times: half failing, all passing, all failing |

To run one with plain Verilator:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/cascade_pkg.sv tb/tb_cascade_top.sv --top-module tb_cascade_top
./obj_dir/Vtb_cascade_top
```

`tb_cnn_layers` prints the cycle count of each layer on both units. For
example, fc8 (K = 4,096, 1,000 classes, 2 samples) takes 272,737 cycles on
the LPU and 288,824 on the HPU. This is close, because that layer is bound by
fetching weights. On AlexNet conv2 (25 output pixels), the LPU's 32 PEs give
69,409 against 100,017 cycles. With one word per cycle from memory, the LPU's
advantage grows with the number of rows that reuse each weight tile.

`tb_lpu` and `tb_hpu` reduce the bank depth to 64 words to keep the run short.
All other testbenches use the modules' defaults.
