# A pixel-serial XNOR-network accelerator for traffic-sign classification

This RTL classifies a 32x32 colour image of a traffic sign into one of the
43 classes of the German Traffic Sign Recognition Benchmark. It uses a binary
("XNOR") convolutional network: after the first layer every weight and
activation is +1 or -1, so multiply-accumulate turns into XNOR and bit
counting. The accelerator does not unroll the network spatially. It reads
**one pixel per clock cycle**, in an order chosen so that convolution, 2x2 max
pooling, batch normalisation and activation run as one stream, with no line
buffers. All filters of a layer work on that stream in parallel. The whole
frame costs very nearly one cycle per weight-window read:

| layer | work, in reads | cycles |
|---|---|---|
| Conv-1 (5x5, 3 -> 64, real-valued input) | 28·28 positions × 3 channels × 25 | 58,800 |
| Conv-2 (5x5, 64 -> 128, binary) | 10·10 positions × 64 channels × 25 | 160,000 |
| FC-1 (3200 -> 512) | one input bit per cycle | 3,200 |
| FC-2 (512 -> 43) | fed directly by FC-1's serial output | 512 |
| class scores out | one per cycle | 43 |

In simulation at the default size, one frame takes 222,589 cycles from
`start` to `done`. At 100 MHz that is 449.26 frames/s. The published
accelerator reports 449.25 frames/s at 100 MHz, i.e. 222,593 cycles, so the
read order and parallelism reproduced here match it to within 4 cycles.

## The network

| layer | input | output | kernel | then |
|---|---|---|---|---|
| Conv-1 | 32×32×3 (8-bit) | 28×28×64 | 5×5, 64 filters | 2×2 max → 14×14×64, BN, sign |
| Conv-2 | 14×14×64 (1-bit) | 10×10×128 | 5×5, 128 filters | 2×2 max → 5×5×128, BN, sign |
| FC-1 | 3200 (1-bit) | 512 | | BN, sign |
| FC-2 | 512 (1-bit) | 43 | | BN → class scores |

Convolutions have no padding. In each convolutional block the order is
convolution, bias, max pooling, batch normalisation, then activation. The
last layer has no activation: its batch-normalised values are the scores,
and the class is the index of the largest.

Conventions used throughout:

* A binary value is one bit: **1 means +1, 0 means −1**. The product of two
  binary values is XNOR.
* For a binary window of N bits, the ±1 dot product is `C = 2·P − N`, where
  `P` is the number of bit positions where input and weight agree.
* Batch normalisation is folded offline into `y = A·x + B`, with
  `A = γ/σ` and `B = β − γμ/σ`. The activation is `bit = (y ≥ 0)`.

## The read order: why pooling needs no buffer

This is the part to understand first. The *input data controller*
(`conv_in_ctrl`) walks six nested loops, outermost first:

```
for py in pooled rows
  for px in pooled columns
    for (dy,dx) in (0,0) (0,1) (1,0) (1,1)      -- the 2x2 pooling window
      for c in input channels
        for ky in 0..K-1
          for kx in 0..K-1
            read channel c at row 2py+dy+ky, column 2px+dx+kx
```

Every channel lives in its own block RAM (`fmap_bram`). The controller sends
the same address to all of them and keeps only the word of channel `c`. Each
word it keeps is tagged with the kernel index `k = ky·K + kx` and two flags:
last pixel of the window, and last channel.

What this order buys:

* **A filter finishes a whole window of one channel every K² cycles.** A
  binary filter receives the window as a 25-bit vector from the *context
  generator*, a shift register. It then XNORs this vector with its stored
  weights for that channel.
* **The channel accumulator finishes one convolution output every
  K²·C_in cycles.** The bias is added with the last channel.
* **The four convolution outputs of a pooling window come out one after
  another.** So the max filter only keeps a running maximum over four
  consecutive values. It needs no line buffer and no second pass.
* **The pooled results leave in raster order.** So the output controller
  writes them to consecutive addresses. Every filter writes its bit into its
  own output-channel RAM, all in the same cycle.

Overlapping windows re-read the same pixels: Conv-2 reads each input bit up
to 100 times. This costs cycles but no memory, and it is what the cycle
budget above counts.

## Convolutional block (`conv_block`)

All `OUT_CH` filters are instances of the same chain, fed by one pixel stream:

```
              ┌ binary input: context_gen (shared) ─> xnor_filter ┐
pixel stream ─┤                                                   ├─> conv_acc ─> max_filter ─> ppe ─> bit
              └ real input:   real_filter ────────────────────────┘   (+bias)       (2x2)      (A·x+B, sign)
```

* **`xnor_filter`** (Conv-2 and any later binary layer) holds the filter
  weights as one K²-bit word per input channel, in registers rather than
  RAM. For each window it XNORs in 1 cycle and counts ones in 5 cycles,
  using a registered adder tree of ⌈log₂25⌉ = 5 levels (`popcount`). It then
  forms `2P − N` in 1 cycle. The latency is 7 cycles and it accepts one
  window per cycle. The testbench checks the 7-cycle latency.
* **`real_filter`** (Conv-1) gets signed 8-bit pixels. It adds each pixel if
  its weight is +1 and subtracts it if the weight is −1, and hands out one
  partial sum per channel window.
* **`conv_acc`** adds the per-channel partial sums and the bias.
* **`max_filter`** keeps the running maximum of four consecutive weighted sums.
* **`ppe`** (point processing element) computes `A·x + B` with one
  multiplier, then the sign. It has 2 pipeline stages.

Each filter has its own `A` and `B` registers. From the last pixel of a
pooling window to `out_valid`, the latency is 5 cycles for Conv-1 and
12 cycles for Conv-2.

## Dense blocks (`dense_block`)

A fully connected layer gets its inputs one bit per cycle. The weight memory
(`fc_weight_bram`) is organised **by input**: word `i` holds input `i`'s
weight for every neuron (512 bits for FC-1). One read therefore feeds all
neurons. Each neuron has its own accumulator and adds +1 or −1 (XNOR of the
input with its weight) in the same cycle as the others. The block counts its
inputs, so word `i` is read while input bit `i` waits one cycle in a
register.

After the last input, the `serializer` captures all accumulators at once and
shifts them out, one per cycle. Per neuron, the bias is added, and then a
single shared `ppe` applies batch normalisation and the sign. Because the
output is serial, FC-1 feeds FC-2 directly: FC-2 uses FC-1's output stream as
its input stream. FC-2's `out_val` carries the class scores. The first
output comes 5 cycles after the last input.

The FC input controller (`fc_in_ctrl`) streams Conv-2's 128 one-bit feature
maps into FC-1. The flattening order is channel-major:
`index = channel·25 + row·5 + column`.

## Top level (`xnor_tsr_top`)

```
host port ──┬─> input RAMs (3 × 1024×8) ─> conv_in_ctrl ─> conv_block Conv-1 ─> conv_out_ctrl
            │   ─> feature RAMs (64 × 196×1) ─> conv_in_ctrl ─> conv_block Conv-2 ─> conv_out_ctrl
            │   ─> feature RAMs (128 × 25×1) ─> fc_in_ctrl ─> dense_block FC-1 ─> dense_block FC-2 ─> scores
            └─> weight registers, bias / BN registers, FC weight RAMs
```

A small sequencer runs the layers one after another: `start` → Conv-1 →
Conv-2 → FC. It pulses `done` one cycle after the last class score.

### Host port

The host port is one write per cycle: `cfg_we` together with a `cfg_wr_t`
struct `{target, idx_a, idx_b, data}`. The targets are defined in `xnor_pkg`:

| target | idx_a | idx_b | data |
|---|---|---|---|
| `T_IMAGE` | channel | pixel address (row·32+col) | signed 8-bit pixel, value/128 |
| `T_Cn_W` | filter | input channel | 25 weight bits, bit k = kernel position k (row-major) |
| `T_Cn_BIAS` | filter | – | signed 16-bit integer, in accumulator units |
| `T_Cn_BN_A` / `T_Cn_BN_B` | filter | – | signed 16-bit A / 24-bit B, 8 fraction bits |
| `T_Fn_W` | 32-bit lane | input index | 32 weight bits of that input, bit j = neuron 32·lane+j |
| `T_Fn_BIAS`, `T_Fn_BN_A`, `T_Fn_BN_B` | neuron | – | as above |

An assertion flags any write while a frame is running. Reset clears the
pipelines and the sequencer, but not the loaded image or coefficients.

The scores come out on `res_valid`, `res_idx` and `res_val`: 43 consecutive
cycles, with `res_val` a signed value carrying 8 fraction bits.

### Storage at the default size

* Conv weights, in registers: 64·3·25 + 128·64·25 = 209,600 bits.
* Input RAMs: 3 × 8 Kb.
* Feature RAMs: 64 × 196 + 128 × 25 bits.
* FC-1 weights: 3200 × 512 = 1.64 Mb.
* FC-2 weights: 512 × 43 bits.

## What follows the published design and what does not

Taken from the published design:

* the layer sizes;
* the block structure (context generator, XNOR/popcount filter with weight
  register, bias accumulator, max filter, PPE with BN register and
  activation, input and output data controllers, per-channel BRAMs, dense
  block with by-input weight memory, parallel accumulators, serialiser and
  PPE);
* the 1 + 5 + 1 cycle binary filter;
* the add/subtract first-layer filter;
* the folded batch normalisation;
* the read order's purpose.

Also taken from it, but not stated there outright: one pixel per cycle and
layers run one after another. This follows from the published frame rate,
which the design reproduces.

This design's own choices, where the published description is silent:

* all number formats: 8-bit pixels, 20-bit accumulators, 16-bit biases,
  Q8 fixed point for A and B, and the bit encoding of ±1;
* the exact loop nesting of the read order;
* the flattening order in front of FC-1;
* the host port and its lane-wise loading of FC weights;
* the sequencer;
* all pipeline latencies other than the binary filter's;
* `sign(0) = +1`.

The published description mentions a greyscale (one-channel) input as
"applicable" to this network, but its network table gives a 32×32×3 input.
This design follows the table: `IMG_CH` = 3. Only the 3-channel input
reproduces the published frame rate. `IMG_CH` = 1 is supported.

Not included:

* the Zynq processing system that loads the coefficients and reads the result;
* the software that generated the original accelerator's Verilog. Here,
  parameters play its role.

Also not included: any trained weights. The testbenches use random
coefficients, so the accuracy of the trained network (96.3 %) is not
demonstrated here, only the arithmetic.

## Verification

Every module has a self-checking testbench, `tb/tb_<module>.sv`. Each one
compares against values computed in the bench, has a watchdog, and ends with
one `TB_RESULT checks=N failures=M` line. Timing checks include:

* the binary filter's 7-cycle latency;
* the PPE's 2 cycles;
* the dense block's 5-cycle first-output delay;
* the read-controller and serialiser sequences.

`tb/tsr_tb_core.sv` is the end-to-end bench. It loads random coefficients and
images through the host port and runs the whole classifier. It compares all
class scores against an integer reference model of the network written in
the bench. It also checks:

* the frame's cycle count against the pixel-serial budget above;
* at full size, the frame rate against 449.25 frames/s within 0.1 %.

It counts that each mechanism actually occurred, and fails otherwise:

* real-valued and XNOR filtering;
* both activation values in every hidden layer;
* pooling choosing a later window position;
* the serial dense-to-dense chain;
* the layer switches.

There are two wrappers:

* `tb_xnor_tsr_top`: reduced size (16×16 image, 6/8 filters, 20 hidden
  neurons, 7 classes), two frames.
* `tb_xnor_tsr_full`: default size, one frame. This takes about 4 s of
  simulation after a few minutes of compilation.

## Simulating and changing it

With Verilator 5, from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/xnor_pkg.sv tb/tb_xnor_tsr_full.sv --top-module tb_xnor_tsr_full
./obj_dir/Vtb_xnor_tsr_full
```

Swap in any other `tb_*` module the same way. The simulator is two-state;
all state that is read is reset or written before use.

To change the network:

* The top's parameters set the image width, input channels, kernel size,
  filter counts, hidden neurons and classes.
* `IMG_W − K + 1` must be even, and so must `(IMG_W − K + 1)/2 − K + 1`.
* Number formats are in `xnor_pkg`.
* A deeper network is built by repeating the feature-RAM → `conv_in_ctrl` →
  `conv_block` → `conv_out_ctrl` group, or by chaining more `dense_block`s.
