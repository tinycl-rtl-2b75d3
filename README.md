# TinyCL — an accelerator that trains as well as infers

TinyCL is a small digital accelerator for *continual learning* on a device
that has to keep learning new classes after deployment. It runs the forward
pass **and** back-propagation of a small convolutional network, one sample at a
time, and stores a class-balanced set of old training samples on chip. When a
new class arrives, the device keeps training on that stored set, and the old
classes are not forgotten (memory-based continual learning, GDumb style). Everything here is
synthesizable SystemVerilog that compiles with Verilator 5 and Yosys/slang,
and is checked against a bit-exact integer reference model.

The main idea is **one datapath for all six layer computations**: convolution
forward, convolution gradient propagation, convolution kernel gradient, and
the dense layer's forward, gradient propagation and weight derivative. Nine
8-lane MAC units and one multi-operand adder do all six. A sliding window that
moves like a snake feeds them, so that every cycle only three new pixels are
read.

## Numbers and data format

| item | value |
|---|---|
| data | signed 16-bit fixed point, Q4.12 (range ±8, step 1/4096) |
| products | kept at full precision, 32 bit (Q8.24) |
| MAC adders | 32 bit, two's-complement (they wrap, see *Limits*) |
| reduction to 16 bit | round half up, `(v + 2048) >>> 12`, then saturate to ±8 |
| memory word | 128 bit = 8 lanes × 16 bit; lane = channel |
| MACs | 9, each 8 multipliers + 8 adders |
| training memory | 1000 samples × 32×32 pixels × 3 channels × 16 bit = 6.144 MB |

Saturating on every reduction clips the values, which stands in for the
value clipping that is used because the network has no batch normalisation.

## The MAC and the nine-MAC array (`tinycl_mac`, `tinycl_mop_adder`)

A MAC multiplies 8 pairs of 16-bit operands (one per channel lane). Its 8
adders have two configurations:

* **multi-operand mode**: 7 of the adders form a 4+2+1 tree and the MAC
  outputs the sum of its 8 products. This is a dot product over 8 channels,
  used by the forward and gradient-propagation passes.
* **multi-adder mode**: each of the 8 adders adds its product to its own
  32-bit partial sum. The MAC then accumulates 8 independent values, which is
  used by the kernel gradient, the dense gradient propagation and the weight
  update.

The nine MACs correspond to the nine positions of a 3×3 window. In
multi-operand mode their nine outputs go into `tinycl_mop_adder`, a
40-bit sum of 9 operands plus an accumulator input. The result is rounded
and saturated to Q4.12. A 3×3×8 convolution therefore produces one output
value per cycle. The adder is written as a plain sum, and synthesis chooses
the tree; the original architecture names a Dadda tree here.

## The snake-shaped sliding window (`tinycl_feature_agu`, `tinycl_feature_manager`)

A convolution output pixel needs the 3×3 neighbourhood of its centre. When
the centre moves one column, 6 of the 9 window pixels are still needed, so
the window (`tinycl_feature_manager`, nine 128-bit registers) shifts and
takes in only the 3 new pixels. That is 3 memory words per cycle, which fits
in one 128-bit access per pixel on three read ports.

Running a raster scan would break this at the end of every row, where the
window would have to be refilled at column 0. The address generator
(`tinycl_feature_agu`) instead walks the rows in alternating directions:

```
 row 0:  → → → → →
 row 1:  ← ← ← ← ←      (the turn is one step DOWN: the window takes
 row 2:  → → → → →       in the three pixels of the next row)
```

At the end of a whole map, the next channel sweep (the next output filter,
or the next input channel of the gradient) starts from the pixel where the
last sweep ended. It then walks the map backwards: the vertical direction
flips and the first step is `STAY`, so nothing is refilled. Only the first
sweep of an operation fills the window, which takes two steps at the
virtual columns −2 and −1. A conv operation therefore costs
`2 + sweeps × h × w` steps. Each step carries a move code
(`STAY/RIGHT/LEFT/DOWN/UP`), the centre row and column, and the sweep index
`k`. Pixels outside the map are supplied as zeros, so every convolution is
3×3, stride 1, "same" size (one pixel of zero padding on every side).

## The six computations (`tinycl_pu`)

The processing unit runs one command (`pu_cmd_t`) at a time through a 4-stage
pipeline: **A** address, **B** read data and window shift, **C** MACs and
adder, rounding, registered write, **D** memory write. It does not stall once
running. In the table, `n` is the number of outputs of the layer and
`h×w×8` is its input.

| op | operands in the window / MACs | MAC mode | cycles (compute) |
|---|---|---|---|
| `CONV_FWD` | feature window × kernel slice `K[k][·][p]`, optional ReLU | operand | n·h·w |
| `CONV_GP` | gradient window × kernel turned 180° and transposed, `K[·][ci][8−p]`; result × ReLU′(input) | operand | 8·h·w |
| `CONV_KG` | feature window × output gradient of the centre pixel, channel k; after each sweep, MAC p holds `dK[k][0..7][p]` | adder | n·h·w |
| `DENSE_FWD` | 8 pixels × 8 channels of input and weights per cycle; partial-sum register | operand | n·h·w/8 |
| `DENSE_GP` | MAC j accumulates `Σn W[pix j][n]·dY[n]` for 8 pixels at a time; × ReLU′(input) | adder | h·w/8·n |
| `DENSE_WD` | MAC j computes `W + I·(−dY[n])` with the weight read as partial sum; written back | adder | n·h·w/8 |

The **kernel update** is done in place with learning rate 1 and batch size 1.
After a `CONV_KG` sweep has accumulated the 72 gradients of one output
filter, a 9-cycle read-modify-write subtracts them from the kernel memory.
This overlaps the next sweep, which is why a conv map must have at least 12
pixels. The dense weight derivative is fused with its update in the same
way. The **kernel manager** holds the current 3×3×8 slice of kernels and
prefetches the slice of the next sweep into a second buffer. The swap at
the sweep boundary is free. The **gradient manager** loads the dense layer's
`dY` vector (up to 16 values) and broadcasts the operand, negated for the
weight update.

At 32×32×8 with 8 filters, a conv command takes 8,192 compute cycles and
8,210 in total: 2 fill steps, and the rest is pipeline depth, prefetch and
the last write. The dense commands with 10 outputs take 1,280 compute
cycles each (1,286–1,289 in total).

## Memories and data layout (`tinycl_mem`, `tinycl_top`)

All memories are `tinycl_mem`: synchronous arrays with 128-bit words, per-lane
write enables, several read and write ports, a read latency of one cycle,
and read data held while idle. The multiple ports stand for the banking by
channel that a silicon version would use.

| memory | default size | ports (read/write) | content |
|---|---|---|---|
| training data | 1000 × 1024 words × 3 lanes | 3 / 1 | samples, one 32×32 RGB image per slot |
| partial feature | 4096 words | 8 / 1 | saved input of every hidden layer, logits |
| kernel | 10384 words | 8 / 8 | conv kernels `K[co][ci][p]` at `k_base+9·co+p`, lane ci; dense weights at `k_base+n·h·w+pix`, lane ci |
| gradient 0 / 1 | 1024 words each | 3 / 8 | ping-pong pair: a command reads one and writes the other |

A feature or gradient map is stored at `base + r·w + c`, with the channel as the lane.
Dense outputs and `dY` are stored at `base + n/8`, lane `n%8`. Because layer
inputs stay in the partial feature memory, the backward pass finds the
features it needs.

## Running a training step (`tinycl_cu`, `tinycl_top`)

The host describes the network in a table of up to 3 `layer_t` entries:
dense or conv, h, w, number of outputs, ReLU, kernel base, and input base.
The last layer's number of outputs is the current number of classes, so the
network grows with the classes without any change to the hardware. Then:

1. `start` with `train=1` and `sample_slot`. The control unit issues forward
   commands for layers 0…nl−1. Layer 0 reads the training memory; the others
   read the partial feature memory. The last layer writes the logits at
   `logits_base`.
2. `loss_req` rises. The host reads the logits through the host port,
   computes `dY` (softmax and cross-entropy, or any loss), writes it into
   gradient memory 0 at address 0, and pulses `loss_ack`.
3. Backward, from the last layer down: gradient propagation masked by ReLU′
   of the layer input, then the kernel gradient or weight derivative with its
   update. The gradient memories swap roles after each layer. The first
   layer does only its kernel update. `done` pulses at the end.

With `train=0` only step 1 runs (inference). The host port (`host_sel`: 0
training, 1 feature, 2 kernel, 3/4 gradient; one word per cycle; read data one
cycle after `host_re`) shares port 0 of each memory. It may be used only while
the processing unit is idle: before `start`, during `loss_req`, or after
`done`.

For the evaluated network (conv 3→8 with ReLU, conv 8→8 with ReLU, dense
32·32·8→10), one training step takes 17,710 cycles forward and 27,213
backward at full size.

## Keeping the sample memory balanced (`tinycl_gdumb`)

Before a new sample is written, the host offers its class on `gd_req/gd_cls`.
The block keeps the label of every slot and a count per class:

* If there is a free slot, the sample takes it.
* If the memory is full and the sample's class holds fewer samples than the
  largest class, it replaces a sample of that largest class: the lowest slot
  holding it, found by scanning one slot per cycle.
* Otherwise it is rejected.

`gd_done` then returns `gd_grant` and `gd_slot`, and the host writes the
image at word `slot × 1024` of the training memory.

## Where this departs from the original description, and limits

* **Dense gradient propagation** uses 8 pixels per MAC and `n` cycles per 8-pixel
  block, 1,280 cycles at 32×32×8→10. This matches the reported cycle count.
  A one-value-per-MAC scheme, `(I/9)·(n/8)` cycles, is also described, and
  the two do not agree. The reported number was followed.
* **Dense weight derivative** takes 1,280 cycles here; 1,821 were reported.
* **Convolution layers take at most 8 input channels.** A wider input would
  need repeated passes with partial outputs accumulated, which is described
  but not built. The evaluated network never needs it.
* **Padding** is one zero pixel on every side for all conv operations, so
  all maps keep their size. A right/bottom padding of 2 is mentioned only for
  the kernel gradient.
* **Loss**: there is no loss hardware; the host computes `dY` during the
  handshake.
* The gradient and kernel address managers are not separate modules. Their
  addresses are formed in the processing unit and the managers.
* **Overflow**: the MAC adders are 32 bits and wrap. With learning rate 1,
  large `dY` values quickly drive weights to the ±8 limits, and then sums of
  many products can wrap. Keep `dY` scaled; the testbenches scale it by
  2⁻² (reduced size) and 2⁻⁷ (full size).
* The memories are arrays, not SRAM macros. Timing, power and area were not
  evaluated; the original implementation reports a 3.87 ns clock, 86 mW and
  4.74 mm² in 65 nm.
* A conv map needs `h·w ≥ 12`, and a dense input needs `h·w` to be a multiple of 8.
  Assertions in `tinycl_pu` check both.

## Verification

Each module has a self-checking testbench in `tb/` that compares against
values computed independently in the testbench and prints
`TB_RESULT checks=… failures=…`:

| testbench | what it checks |
|---|---|
| `tb_tinycl_mac`, `tb_tinycl_mop_adder` | random operands in both modes, rounding and saturation |
| `tb_tinycl_mem` | random multi-port reads and lane-masked writes against a model |
| `tb_tinycl_feature_agu` | snake order, fill steps, STAY at channel change, dense loop orders, step counts |
| `tb_tinycl_feature_manager` | the four shift directions against a model window |
| `tb_tinycl_kernel_manager` | normal and transposed fetches, prefetch and swap timing |
| `tb_tinycl_grad_manager` | dY loading, operand selection, negation |
| `tb_tinycl_pu` | all six commands on a 4×6 map against a reference, with cycle limits |
| `tb_tinycl_cu` | the command sequence of training and inference with a stand-in PU |
| `tb_tinycl_gdumb` | fill, replacement and rejection against a model of the rule |
| `tb_tinycl_top` | end to end, reduced size (4×8 images, 6 slots) |
| `tb_tinycl_top_full` | end to end at the default parameters (32×32, 1000 slots, 10 classes) |

The two end-to-end tests share `tb/tinycl_top_tb_body.svh`. Each runs the
following through the host port:

* Fill the training memory through the GDumb manager, offering more samples
  than there are slots, so that replacement happens.
* Run a training step with 2 classes, then one with more classes, then an
  inference.
* After each of these, compare every word of the feature, kernel and
  gradient memories with an exact integer model of the network.
* Check every command's cycle count against the compute count above.

They also count how often each mechanism occurred:

* snake turn;
* channel change without refill;
* kernel prefetch swap;
* each MAC mode;
* ReLU clamp and ReLU′ mask;
* gradient memory ping-pong;
* kernel read-modify-write;
* GDumb replacement;
* inference;
* a change in the number of classes.

A mechanism that never occurred counts as a failure. The full-size test
takes a few seconds with Verilator.

To run one of them:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -Itb \
    rtl/tinycl_pkg.sv rtl/tinycl_top.sv tb/tb_tinycl_top_full.sv \
    --top-module tb_tinycl_top_full -o sim
./obj_dir/sim
```

## Files

`rtl/tinycl_pkg.sv` holds the data types, the command and layer structs, and
the rounding and saturation functions. Each other file in `rtl/` is one
module named after its file, and begins with a comment giving its
function, timing, interface and design choices.
`tinycl_top` is the top level.
