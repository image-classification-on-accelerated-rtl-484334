# A training accelerator for the dense layers of a small CNN

This design trains and runs the two dense layers of a small image classifier
on an FPGA. The classifier is a convolution, a ReLU hidden layer and a softmax
output layer, sized for 28 × 28 handwritten digits. A host computer does the
cheap part: a fixed 3 × 3 sharpening convolution, 2 × 2 max-pooling and
flattening. It then sends each mini-batch of 32 pooled images (169 values
each), with their one-hot class vectors, over an AXI4-Lite port. The chip
does the rest:

* the hidden layer, h1 = ReLU(v · W1), with 169 → 128 neurons;
* the output layer, 128 → 10, whose exponentials and their per-image sum
  are formed in the same pass;
* softmax, giving the class probabilities h2 that the host reads back;
* the mean cross-entropy loss of the mini-batch.

A single control bit, *isTraining*, decides what happens next. Without it,
the operation ends after the forward pass (inference). With it, the chip
continues with the backward pass and updates both weight matrices with Adam.
The weights W1 and W2 and all Adam moments stay in on-chip memory from one
mini-batch to the next. The host only has to write the initial weights once.

```
 host ──AXI4-Lite──► axil_slave ──register bus──► cnn_fc_accel (controller, address decoder)
                                                   │
   v[32][169] ─► fc_relu ─► h1[32][128] ─► output_layer ─► e[32][11] ─► softmax_loss ─► h2, d2, loss
     W1[169][128] ─┘            W2[128][10] ─┘                                            │
                                                               (isTraining) ◄─────────────┘
                         adam_bias_corr ─► k1, k2 (once per mini-batch)
                         adam_w2: d1 = relu'(h1)·(d2·W2ᵀ), then W2, mW2, vW2 updated
                         adam_w1: uses d1 and v;  W1, mW1, vW1 updated
```

Names follow the original description: `v` is the pooled input, `outActual`
the target vectors, `h1` and `h2` the layer outputs, and `mW1`, `vW1`,
`mW2`, `vW2` the Adam moments.

## Numbers: Q32.32 fixed point

Every value on the chip is a signed 64-bit fixed-point word with 32
fraction bits (Q32.32). That gives a range of ±2³¹ and a resolution of
2⁻³² ≈ 2.3·10⁻¹⁰. The original design does not state its number type, but it
names 16-bit floats and fixed point only as possible later reductions, so it
ran in a wider floating-point format. Fixed point is this design's own
choice. It keeps the datapath to integer multipliers and adders and makes
every result bit-exact and repeatable.

`cnn_pkg` holds the shared helpers:

* `fx_mul` multiplies to 128 bits, rounds to nearest and saturates.
* `fx_add` adds with saturation.

Four small multi-cycle units supply the non-linear functions. Each takes a
`start` pulse and gives a `done` pulse:

| unit      | method                                                             | clocks |
|-----------|--------------------------------------------------------------------|--------|
| `fx_exp`  | splits x = n·ln2 + r, evaluates a degree-11 polynomial for e^r, shifts by n; input clamped to [−23, 21] | 14 |
| `fx_log`  | normalises to [1, 2), then finds 32 fraction bits of log₂ by repeated squaring, times ln 2 | 34 |
| `fx_div`  | restoring division, one quotient bit per clock, saturating          | 98 |
| `fx_sqrt` | digit-by-digit integer square root of x·2³²                         | 50 |

The exponential's input range is limited, so the output layer subtracts
each image's largest logit before exponentiating. Every exponential then
lies in (0, 1], which leaves the softmax unchanged. Logits far apart (more
than 23) give an exponential of about 10⁻¹⁰, which is negligible next to the
largest one.

## Memories and the cyclic partition

Each array is a `cyclic_ram`, split into PR × PC banks:

* element (r, c) lives in bank (r mod PR, c mod PC);
* its address inside that bank is (r div PR)·(COLS/PC) + (c div PC).

So the PR × PC *tile* of neighbouring elements that starts at
(PR·trow, PC·tcol) sits at one common address, one word in each bank. A
whole tile is read or written in a single clock. Per-word write enables let
an engine write only part of a tile.

Each bank is a plain array with one write port and one read port. The read
is registered, so data appears one clock after `rd_en`.

The partition factors copy the unrolling of the original loops:

| array                  | size      | tile (PR × PC) | reason |
|------------------------|-----------|----------------|--------|
| v                      | 32 × 169  | 4 × 1          | 4 images at once |
| W1, mW1, vW1           | 169 × 128 | 1 × 4          | 4 hidden neurons at once |
| h1                     | 32 × 128  | 4 × 4          | output tile of the hidden layer |
| d1                     | 32 × 128  | 1 × 4          | 4 neurons of one image |
| W2, mW2, vW2           | 128 × 10  | 1 × 10         | class dimension fully split |
| outActual, h2, d2      | 32 × 10   | 1 × 10         | one image, all classes |
| e (exponentials + sum) | 32 × 11   | 1 × 11         | column 10 holds the sum |

Where the arrays live is left to synthesis. The original placed the weights
in UltraRAM and the rest in dual-port block RAM. Synthesis of the top at the
default sizes counts 5,355,200 memory bits, which is the 83,675 words above.

## Forward pass

**`fc_relu`** holds 16 multiply-accumulators for a 4-image × 4-neuron tile
of h1.

* Each clock it reads one v tile (4 images at feature k) and one W1 tile
  (feature k, 4 neurons), and adds all 16 products.
* After the 169 features it writes the tile to h1. ReLU is applied on that
  write, so negative sums never leave the block.
* It visits the 8 × 32 tiles in turn. That takes (B/U)(L/U)(P+2) + 1 =
  43,777 clocks.

**`output_layer`** holds 4 × 10 multiply-accumulators, for 4 images and all
classes.

* Over 128 clocks it forms the logits of a 4-image group.
* It finds each image's largest logit and subtracts it.
* It passes them through four `fx_exp` units, one per image.
* For each image it adds up the ten exponentials while they come out.
* It writes the exponentials and their sum as one 11-word row of e.
* The whole batch takes (B/U)(L + 2 + 15C + U) + 1 = 2,273 clocks.

**`softmax_loss`** works one image at a time.

* It divides 1 by the sum (`fx_div`).
* It multiplies that reciprocal by the ten exponentials to get h2.
* It writes the error d2 = (h2 − y)/B, the gradient of the mean
  cross-entropy with respect to the logits.
* For each class with a non-zero target it accumulates −y·ln h2 (`fx_log`).
  The accumulated total, divided by B, is the loss register.
* With one-hot targets it needs 146 clocks per image, 4,672 per batch.

## Backward pass and the stored corrected moments

Textbook Adam keeps the raw moments m and v. From them it derives the
corrected moments m̂ = m/(1−β₁ᵗ) and v̂ = v/(1−β₂ᵗ) at every step. The
original design labels its stored arrays as the *corrected* momentums, and
this design stores exactly those. The two forms are equal once
m = (1−β₁ᵗ)·m̂ is substituted. The per-weight update then becomes:

```
m̂ ← (1 − k1)·m̂ + k1·g          k1 = (1 − β1) / (1 − β1^t)
v̂ ← (1 − k2)·v̂ + k2·g²         k2 = (1 − β2) / (1 − β2^t)
w ← w − η·m̂ / (sqrt(v̂) + ε)     β1 = 0.9, β2 = 0.999, η = 0.01, ε = 1e-7
```

This form is chosen for precision. At t = 1 the raw second moment is only
0.001·g². For a gradient of 10⁻⁴ that is 10⁻¹¹, below the 2⁻³² step, so it
would round to zero. v̂ stays of the order of g² instead. It is also held
scaled by 2²⁴, which resolves it down to 2⁻⁵⁶. The lane computes the step as

q = (η·m̂·2¹²) / (sqrt(v̂·2²⁴) + ε·2¹²).

Gradients up to |g| < 11 fit without saturation. Above that, g² saturates,
which only shortens the step.

**`adam_bias_corr`** runs once per mini-batch.

* It keeps β₁ᵗ and β₂ᵗ as running products.
* It computes k1 and k2 with a single shared divider.
* It counts the step t, which the host can read.
* `clear` resets it to t = 0.
* A step takes 200 clocks.

The exponentiation is therefore done once per mini-batch and shared by both
Adam engines, as in the original design.

**`adam_lane`** performs one weight update as above. It is not pipelined:
multiply, square root, then divide, 151 clocks from `start` to `done`.

**`adam_w2`** ("Adam on W2") owns mW2 and vW2 and works in two phases.

1. It forms the error of the hidden layer,
   d1[i][k] = [h1[i][k] > 0] · Σⱼ d2[i][j]·W2[k][j].
   It uses W2 before the update and produces one (i, k) per clock. This d1 is
   the value handed on to the next engine, so the W1 update needs no product
   with W2 of its own.
2. For each hidden neuron k, it accumulates the gradient row
   gⱼ = Σᵢ h1[i][k]·d2[i][j] over the 32 images. It then starts ten
   `adam_lane`s, one per class, and writes W2, mW2 and vW2 of row k back.

A step takes B·L + L(B + 155) + 2 = 28,034 clocks.

**`adam_w1`** ("Adam on W1") owns mW1 and vW1.

* For each feature p and each group of 4 neurons, it accumulates
  Σᵢ v[i][p]·d1[i][j] over the batch.
* It then runs four lanes.
* A step takes P(L/U)(B + 155) + 1 = 1,011,297 clocks, which is 93 % of a
  training step.

## Controller and host interface

**`axil_slave`** handles one AXI4-Lite transfer at a time.

* Data is 64 bits wide, one Q32.32 word per transfer, with no bursts.
* A write needs AWVALID and WVALID together. When a write and a read arrive
  in the same clock, the write goes first.
* Each transfer becomes a single-clock request on a simple register bus,
  which answers exactly one clock later.
* The response appears 3 clocks after the address handshake. Assertions
  check the AXI rule that a response holds until it is accepted.

**`cnn_fc_accel`** is the top level. It decodes addresses and steps through
the phases:

```
IDLE ─start─► FC ─► OUT ─► SMX ─┬─(isTraining=0)──────────────────────► IDLE, done
                                └─(isTraining=1)─► CORR ─► AW2 ─► AW1 ─► IDLE, done
IDLE ─clear─► CLEAR (zero mW1, vW1, mW2, vW2, t) ─► IDLE, done
```

Each phase gives the ports of the memories it uses to its engine. The
engine starts with a one-clock pulse on entry to the phase. In IDLE the
memories belong to the host. When an operation ends, `done_irq` pulses and
the done bit is set.

The measured clock counts at the default sizes are:

* inference: 50,722 + 2 clocks;
* training step: 1,090,253 + 5 clocks.

The original gives no clock frequency, so these cannot be compared directly
with its reported seconds per epoch.

Address map, with byte addresses and 64-bit words:

| field        | bits    |
|--------------|---------|
| region       | [22:19] |
| row          | [18:11] |
| column       | [10:3]  |

| region | contents | access |
|--------|----------|--------|
| 0 | registers: column 0 CTRL, column 1 STEP, column 2 LOSS | see below |
| 1 | v[32][169] | read/write |
| 2 | outActual[32][10] | read/write |
| 3 | h2[32][10] | read only |
| 4 | W1[169][128] | read/write |
| 5 | W2[128][10] | read/write |

* Writing CTRL: bit 0 starts an operation, bit 1 is isTraining, bit 2
  clears the optimiser.
* Reading CTRL: bit 0 busy, bit 1 done, bit 2 isTraining.
* STEP reads the Adam step count t.
* LOSS reads the mean cross-entropy of the last mini-batch.

These accesses answer SLVERR:

* an array access while an operation runs;
* an address outside an array;
* a write to h2;
* a write with a partial byte strobe.

A training epoch goes like this:

1. The host writes W1 and W2 (for example Gaussian, standard deviation 0.1).
2. It writes CTRL = 4 to clear the optimiser.
3. For every mini-batch it writes v and outActual, then writes CTRL = 3.
4. It waits for done and reads h2 and LOSS as needed.

For inference, step 3 uses CTRL = 1.

The host may convolve the next mini-batch while the accelerator works, so
host and chip overlap. It can write that mini-batch only after done, since
the arrays are locked while busy. All sizes are parameters of the top
(`B`, `P`, `L`, `C`, `U`). The 8-bit row and column fields allow up to 256
of each per array. `B` and `L` must be multiples of `U`.

## Where this design departs from the original

* **Number format.** Q32.32 fixed point is used in place of floating point.
  Results agree with a double-precision model to about 10⁻⁶ after Adam
  steps.
* **Stored moments.** The stored moments are the corrected ones, and the
  second moment is scaled by 2²⁴. This is equivalent in exact arithmetic;
  the reason is precision.
* **Sequencing and pipelining.** The engines run one after another. Inside
  each, loops are unrolled by the original factors:
  * 4 × 4 for the hidden layer;
  * 4 × 10 for the output layer;
  * 10 and 4 Adam lanes.

  The Adam lanes themselves are not pipelined. A training step is therefore
  dominated by the 1.01 M clocks of the W1 update. One epoch of 60,000
  images takes about 2·10⁹ clocks, several seconds at usual FPGA clock
  rates. That is slower than the original's reported 2.3 s.
* **Softmax scaling.** The largest logit of each image is subtracted before
  the exponentials. The original forms the exponentials of the raw logits;
  the softmax is the same either way, and this avoids saturation.
* **Resource limits.** The limit of 25 multiplier and adder
  cores is a high-level-synthesis setting and is not modelled. The forward
  engines alone have 56 multipliers.
* **Own choices.** The address map, the clear command, the loss register,
  the SLVERR rules and the reset behaviour are this design's own. Only the
  control state is reset (asynchronously, active low); memory contents are
  not.
* **Convolution.** The convolution and pooling stay on the host, as in the
  original.

## Simulating

Each block has a self-checking testbench in `tb/`. It ends by printing
`TB_RESULT checks=N failures=M`. With Verilator 5, from the directory that
holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
          rtl/cnn_pkg.sv tb/tb_cnn_fc_accel.sv --top-module tb_cnn_fc_accel -o sim
./obj_dir/sim
```

Replace the testbench name for the other tests:

| testbench | what it checks |
|-----------|----------------|
| `tb_fx_math` | exp, log, division and square root against real arithmetic, and their latencies |
| `tb_cyclic_ram` | three partitionings against a flat model, including which elements form a tile |
| `tb_axil_slave` | random traffic with random stalls, SLVERR, write priority, 3-clock latency |
| `tb_fc_relu`, `tb_output_layer`, `tb_softmax_loss` | each forward engine against a real-number model, and its clock count |
| `tb_adam_bias_corr`, `tb_adam_lane` | correction factors over 160 steps; lane updates over gradients from 10⁻⁷ to 5 against textbook Adam |
| `tb_adam_w2`, `tb_adam_w1` | both Adam engines against a textbook model, including d1, and their clock counts |
| `tb_cnn_fc_accel` | the whole chip at reduced sizes (B = 8, P = 9, L = 8) through AXI |
| `tb_cnn_fc_accel_full` | the same at the full default sizes |
| `tb_cnn_fc_accel_train` | 150 training mini-batches on a synthetic 10-class set at reduced sizes: the loss must fall and unseen images must be classified (it reaches 100 % from 27 %) |

The two whole-chip tests work as follows:

* `tb_cnn_fc_accel` runs at reduced sizes: clear, inference, then two
  training steps. It compares h2, the loss and every weight with a
  double-precision model. It checks each pass's clock count against the sum
  of the engine latencies. It counts the mechanisms and fails if one never
  occurred: inference, training, ReLU cut-off, SLVERR on a busy access, and
  optimiser clear.
* `tb_cnn_fc_accel_full` repeats this with one training step and every
  parameter at its default. It takes about half a minute.

All parameters of the RTL modules default to the sizes above, so any module
can also be linted on its own:

```
verilator --lint-only -Wall -y rtl rtl/cnn_pkg.sv rtl/<module>.sv
```

The remaining lint warnings are of two kinds. Some are unused signals, such
as busy flags and the high bits of a division remainder. The other is the
reset net being used by both the flops and the `disable iff` of assertions.
