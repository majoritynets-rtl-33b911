# MajorityNet: a binarized CNN accelerator with approximate (majority) popcount

In a binarized neural network every activation and weight is +1 or -1, stored
as logic 1 or 0. A neuron's dot product then reduces to XNOR gates followed by a
population count (the "XnorPopcount"), and the count is compared with a
per-channel threshold that absorbs bias and batch normalisation. On FPGAs the
popcount adder trees take most of the area.

The MajorityNets idea, from "MajorityNets: BNNs Utilising Approximate Popcount
for Improved Efficiency" (Rasoulinezhad, Fox, Zhou, Wang, Boland, Leong), is to
approximate that count. The XNOR products are split into groups of three. Each
group is replaced by its 3-input majority: one bit that says whether at least
two of the three products are +1. The adder then sums N/3 one-bit terms instead
of N terms. On an FPGA, three XNORs and the majority fit in one 6-input LUT,
while the exact version needs two LUTs for three XNORs and a full adder. The
network is trained with the approximation in place, so it learns weights that
suit it.

This repository holds SystemVerilog RTL for such a network: the padded CNV
network ("CNV-P") from its second layer to the classifier. All five binary
convolution layers use the majority operation (MConv), and so do all three
fully-connected layers (MFC). The RTL is an independent implementation written
from the paper's description. Where the paper gives no detail, the choices made
here are listed in the section "Choices and departures".

## 1. The arithmetic

For a neuron with N binary inputs the exact output is

    y = 2 * popcount(XNOR(x, w)) - N + B

XNorMaj-3 groups the N products in threes. Each group gives one majority bit
`maj_g` (1 when at least 2 of its 3 products are 1). Bit `maj_g` is the sign of
the group's 3-term ±1 dot product, that is clip(x·w, -1, +1). Each majority bit
stands for the group's sum through two fixed scale values, V1 = 2.625 when the
bit is 1 and V0 = 0.375 when it is 0:

    y~ = 2 * sum_g ( maj_g * (V1 - V0) + V0 ) - N + B
       = 2 (V1 - V0) * c  +  2 V0 N/3  -  N  +  B ,      c = sum_g maj_g

Here c is the only quantity the hardware computes. Everything else is a linear
function of c, the same for every pixel of a channel. It merges with the batch
normalisation that follows, `gamma (y~ - mu) / sigma + beta`, into a single
compare:

    output bit = ( c >= T_n )          T_n = ceil( (mu - beta*sigma/gamma + N - B - 2 V0 N/3) / (2 (V1 - V0)) )

T_n is computed once per output channel n when the trained network is exported.
It is loaded as the channel's threshold. With V1 = 2.625 and V0 = 0.375 the
denominator is 4.5 and `2 V0 N/3` is `N/4`. A channel with a negative
batch-norm scale (gamma < 0) flips the compare. The hardware always tests
`>=`, so such a channel must be exported with its weights inverted. The
paper's simplified equation prints the constant term as `N V0 / M`, without the
factor 2 that expanding its own previous equation gives. This does not matter
to the hardware: the constant only shifts T_n.

The count needs ceil(log2(N/3 + 1)) bits, and so does the threshold. For every
layer of CNV-P this equals the ceil(log2(N/3)) that the paper's block diagram
prints.

## 2. The network

| layer | input map | in ch | out ch | N per neuron (padded) | fold FF | PEs | pool after |
|-------|-----------|-------|--------|-----------------------|---------|-----|------------|
| Conv2 | 32x32 | 64  | 64  | 576        | 1  | 64 | yes (to 16x16) |
| Conv3 | 16x16 | 64  | 128 | 576        | 4  | 32 | no |
| Conv4 | 16x16 | 128 | 128 | 1152       | 4  | 32 | yes (to 8x8) |
| Conv5 | 8x8   | 128 | 256 | 1152       | 16 | 16 | no |
| Conv6 | 8x8   | 256 | 256 | 2304       | 16 | 16 | yes (to 4x4) |
| FC1   | 4096  |  -  | 512 | 4096 (4098)| 64 | 8  | - |
| FC2   | 512   |  -  | 512 | 512 (513)  | 64 | 8  | - |
| FC3   | 512   |  -  | 10  | 512 (513)  | 10 | 1  | - |

The channel counts and folding factors are the paper's. The pool positions and
the 32x32 map size come from the CNV topology. They are consistent with the
paper's numbers: FC1 has 4096 = 4x4x256 inputs, and each pool multiplies the
folding factor by 4. Layer 1 works on the non-binary image and is not part of
this design. The top module `majoritynet` receives its binary 32x32x64 output
map, one pixel (64 bits) per handshake in raster order. The top outputs FC3's
ten majority counts as class scores (the largest one names the class) and its
ten thresholded bits.

**Folding.** A layer with COUT output channels has P = COUT/FF processing units
(PEs). Each PE has the full input width and serves FF channels one after
another, one per clock. The paper folds the number of PEs rather than their
width, so no partial sums ever need storing. After each 2x2 pool the pixel rate
drops by four, so the layers after it can be folded four times more and keep
up. With the paper's factors every layer needs roughly 1,024 to 1,156 cycles
per image:

* Conv2 walks its 34x34 padded grid in 1,156 steps.
* Conv3 takes 256 windows x 4 folds.
* Conv5 takes 64 windows x 16 folds.
* FC1 needs only 64 cycles.

The pipeline is therefore balanced at about one image per 1,160 cycles. In the
full-size test, loading the parameters takes about 3,860 cycles and two images
then take roughly 2,200 to 3,900 cycles more, depending on the random gaps in
the input stream and the output backpressure.

## 3. Inside a majority convolution layer (`mconv_layer`)

The layer has three stages joined by valid/ready handshakes.

**Window buffer (`window_buffer`).** Pixels arrive with all channels in
parallel. The buffer is one shift register, two padded rows plus three pixels
long, per channel. It walks the padded (D+2)x(D+2) grid in raster order. On a
border position it shifts in a padding pixel (all bits PAD_BIT, default 0,
i.e. -1) and does not accept input, so `in_ready` is low. Elsewhere it takes
one input pixel. From grid position (2,2) on, the last three pixels of each of
the three rows form the 3x3 window of the output pixel one row and one column
back. The buffer presents that window and holds still until it is taken.

**Window layout.** This is the one convention a user must get right when
exporting weights. The window is 9*CIN bits. Bit `j*3*CIN + i*CIN + ch` holds
kernel row i, column j (0 = top, left) of input channel ch. Each weight word is
laid out the same way. This puts the three columns of one kernel row of one
channel in the same position of three 3*CIN-bit slices. Majority group
g = i*CIN + ch therefore takes bits g, g+3*CIN and g+6*CIN. That matches the
majority convolution: the dot product over one row of one channel is clipped to
±1. Because the groups never cross rows or channels, the layer can slide its
window and fold freely.

**PE array (`pe_array`).** It holds P `majority_pe`s. Each PE has two
`param_mem` buffers of FF words, one for weights and one for thresholds. A fold
counter f addresses both, so PE p computes channel p*FF + f in cycle f. The
FF results are gathered, and the full COUT-bit output pixel is registered after
the last fold. A new window can start while the previous result waits; only
its last fold waits for the output register to be free.

**PE (`majority_pe`, `maj_popcount`, `xnor_maj3`).** `xnor_maj3` is an array
of XNorMaj-3 units. Each unit does `z = ~(x ^ w)` on three bits and outputs
`z0 z1 | z0 z2 | z1 z2`. `maj_popcount` counts the unit outputs, and the PE
compares the count with the threshold. All three are combinational, so a fold
is a single cycle.

**Pool (`maxpool2x2`).** The pool is used when POOL = 1. For binary values the
maximum is the OR. On even rows the OR of each horizontal pair goes into a row
buffer of D/2 entries. On odd rows it is ORed with the stored value and one
pooled pixel is emitted.

## 4. Fully-connected layers (`fc_collector`, `mfc_layer`)

The FC layers take their input vector all at once. `fc_collector` gathers the
sixteen 256-channel pixels of the last pooled map into a 4096-bit vector.
Pixel p goes to bits [p*256 +: 256], with pixels in raster order. `mfc_layer`
pads the vector with PAD_BIT up to a multiple of three (4096 becomes 4098, 512
becomes 513). It then feeds the vector to a `pe_array`. Group g of an FC
neuron takes inputs g, g+K/3 and g+2K/3, where K is the padded length. The
weights at the pad positions are part of the loaded word, so training decides
what a pad input contributes. FC3's counts (0..171) are the class scores.

## 5. Loading parameters

All weights and thresholds are written through one bus on `majoritynet`:

| port | width | meaning |
|------|-------|---------|
| `cfg_we` | 1 | write this cycle |
| `cfg_layer` | 4 | 0..4 = Conv2..Conv6, 5..7 = FC1..FC3 (`majnet_pkg::layer_e`) |
| `cfg_ch` | 9 | output channel n |
| `cfg_w` | 4098 | weight word of channel n, low K bits used, in the layout of section 3 or 4 |
| `cfg_thr` | 11 | threshold T_n, low bits used |

One write per output channel loads the whole network in 1,930 writes. Writes
may happen at any time. A write that changes a channel while an image is in
flight changes that image's result.

## 6. Handshakes and timing

Every stream uses valid/ready: data moves on a clock edge where both are high.
Every stage registers its valid output and accepts new data when its output
register is empty or being read. Any stage can therefore stall the ones before
it, and the input sees `in_ready` low during padding steps and while a folded
layer is busy. Reset (`rst_n`, asynchronous, active low) clears only the
control state: the grid, fold and pool counters and the valid flags. The data
registers need no reset, because nothing reads them before they are written.

## 7. Choices and departures

The following points are this design's own. The paper does not specify them.

* The padding value is 0 (-1). The paper says all layers use padding but not
  with what value. It is a parameter (`PAD_BIT`).
* Padding is inserted by the window buffer, which stalls the input stream on
  border positions.
* The weight, window and FC group layouts of sections 3 and 4, including the
  grouping of FC inputs (the paper only describes grouping for convolutions).
* The configuration bus and the one-write-per-channel loading.
* Channel-to-PE mapping (PE p serves channels p*FF..p*FF+FF-1), one fold per
  cycle, and results registered after the last fold.
* The threshold compare is `count >= T`. Channels with negative scale need
  inverted weights at export.
* The popcount is written as a count of ones and its adder tree is left to
  synthesis. The paper does not describe the compressor tree.
* The XNorMaj-3 units are written as one vector array per PE rather than one
  module instance per LUT. Each bit lane is one unit.
* The popcount width is ceil(log2(N/3+1)). This equals the paper's
  ceil(log2(N/3)) for all CNV-P layers.
* Only FC3's counts leave the chip. The counts of the other layers are computed
  but unused, and synthesis removes them.

The following are not built:

* Layer 1.
* The exact XnorPopcount layers, which the paper uses as its baseline and in
  mixed configurations such as "BBMBM+M".
* Training, including the straight-through estimator used for back-propagation.

## 8. Files

`rtl/` (one module per file):

* `majnet_pkg.sv`: the group size M = 3, the helpers `pad3()` and `cnt_width()`,
  and the layer codes.
* `xnor_maj3.sv`: the XNorMaj-3 units.
* `maj_popcount.sv`: the majority popcount.
* `majority_pe.sv`: popcount plus threshold compare.
* `param_mem.sv`: the weight and threshold buffer of a PE.
* `pe_array.sv`: the folded PE row.
* `window_buffer.sv`: line buffers, padding and 3x3 windows.
* `maxpool2x2.sv`: the binary 2x2 max pool.
* `mconv_layer.sv`: the MConv layer.
* `fc_collector.sv`: gathers pixels into a vector.
* `mfc_layer.sv`: the MFC layer.
* `majoritynet.sv`: the network, and the top module.

`tb/` holds one self-checking testbench per module, `tb_<module>.sv`. Each
prints `TB_RESULT checks=N failures=M` and has a watchdog. In addition:

* `majoritynet_driver.sv` is shared by the two network tests. It loads random
  weights and thresholds, streams random images with random gaps and
  backpressure, and checks the class scores, and every bit of the FC1 input
  vector, against a plain behavioural model of the network. The model follows the majority convolution literally: per
  kernel row and channel, a ±1 dot product, clip, count, compare. It also
  checks that padding, input stalls, folding, pooling, output backpressure and
  FC input padding all occurred.
* `tb_majoritynet.sv` runs a scaled-down network (8x8 maps, 4..8 channels,
  three images).
* `tb_majoritynet_full.sv` runs the network at its full default size (two
  images). It builds in under a minute and runs in about a second.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/majnet_pkg.sv tb/tb_majoritynet_full.sv --top-module tb_majoritynet_full
    ./obj_dir/Vtb_majoritynet_full

Replace the testbench name to run any other test.

## 9. How far to trust it

* Every module is checked against a model written independently of its RTL.
  Each testbench was also shown to fail on a deliberately broken copy of its
  module.
* The full-size network test compares every bit of the FC1 input vector, which
  is the output of all five convolution layers and pools, and the ten FC3
  outputs per image, with random weights. FC1 and FC2 are checked at full size
  only through FC3's counts. At small sizes the layer tests check them
  directly.
* The design has not been synthesised for an FPGA here. LUT counts and the
  paper's area and accuracy figures are not reproduced.
* With random weights the network computes nothing meaningful. Running real
  images needs weights and thresholds exported from a trained MajorityNet in
  the layouts above, which these files do not include.
