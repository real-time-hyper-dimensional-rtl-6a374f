# HyDRATE LRCN + HD accelerator in SystemVerilog

This is RTL for a video activity classifier built the HyDRATE way. The
classifier has no multipliers in its neural network and can learn new
classes on the device. It follows the published HyDRATE design (Kandaswamy et
al., "Real-time Hyper-Dimensional Reconfiguration at the Edge using Hardware
Accelerators"), but it was written independently from that description and is
not the authors' code.

The design rests on two ideas.

1. **No multipliers in the network.** Every weight of the ResNet50 + LSTM
   feature extractor (an LRCN network) is a signed power of two. A
   multiply-accumulate therefore becomes a *shift-accumulate* (SACC): flip the
   sign, shift the 8-bit activation, add.
2. **A hyperdimensional (HD) back end replaces the classifier layers.** The
   512 LSTM outputs of a frame become one 4096-bit random-looking hypervector,
   built with XOR and majority votes only. The frame is classified by Hamming
   distance to one stored *exemplar* vector per class, averaged over the last
   12 frames.

   An exemplar is the bitwise majority of the hypervectors of the class's
   training frames. So a new class can be learned on the device from a few
   video clips, without back-propagation. Inference keeps running while the
   new class is learned.

The RTL contains these accelerators, chained as in the LRCN configuration:

```
 image words          2048 bytes / frame          512 bytes / frame
 ──────────► NNPE ───────────────────► LSTM ─────────────────────► HD classifier ──► class,
 (ResNet50,  8 x 256 SACC lanes,        160 SACC lanes,             D = 4096, K = 512,   distance,
  layer by   ping-pong data buffers     sigmoid/tanh tables,        101 classes,         window
  layer)                                one step per frame          12-frame window      length
```

Everything a processor did in the original system is brought out as plain
ports on `hydrate_top`. That covers:

- loading images and weights;
- sequencing the ResNet50 layers;
- streaming the LSTM kernels from DRAM;
- loading the HD model;
- starting and stopping training.

## Number formats

All arithmetic is integer and exact up to the final saturation.

| Quantity | Format |
|---|---|
| activations, features, LSTM `h` | signed 8 bit (`act_t`) |
| weight code (`wcode_t`) | 4 bits: bit 3 sign; bits 2:0 exponent `e`, value ±2^-e; `e = 7` is zero |
| product | `d << (6 - e)`, i.e. the weight value scaled by 2^6, exact, 16 bits |
| accumulator | 32 bits |
| per-channel output parameters (`chan_param_t`) | 16-bit bias, 5-bit shift |
| sigmoid / tanh table input | 8-bit Q3.4 (range -8 ... 7.94) |
| sigmoid / tanh table output | Q0.7 (128 = 1.0, saturated to 127) |
| LSTM cell state `c` | signed 16-bit Q8.7 |

**Output functions.** Every accumulated dot product passes through the
output functions (`sacc_outfn`):

```
t = sat8((acc >>> shift) + bias)          // folded batch norm + scaling
y = t | ReLU(t) | sigmoid_table[t] | tanh_table[t]
```

Batch normalisation is assumed folded into a power-of-two scale and a bias,
so no multiplier is needed. The `>>> shift` also removes the 2^6 weight
scale.

**Activation tables.** The two 256-entry tables are small data files, read
with `$readmemh` from `rtl/`. Each entry a is indexed as a signed byte, with
x = a / 16:

```
sigmoid[a] = min(127, floor(128 / (1 + exp(-x)) + 0.5))
tanh[a]    = clamp(floor(128 * tanh(x) + 0.5), -128, 127)
```

**LSTM cell.** Gates i, f, o are sigmoid outputs; g is a tanh output (all
Q0.7). The cell computes:

```
c' = sat16((f*c >>> 7) + (i*g >>> 7))
h  = sat8((o * tanh_table[sat8(c' >>> 3)]) >>> 7)
```

These are the only three multipliers in the design.

## The Neural Network Processing Engine (`nnpe`)

### SACC vectors

A `sacc_vector` has N = 256 lanes. Each lane applies the sign and the shift
of its weight code to one activation byte. An adder tree sums the lanes, and
an accumulator adds up the M words of one dot product:

- `first` clears the accumulator;
- `last` finishes the sum;
- the result appears two cycles after the last word.

The NNPE has S = 8 such vectors. All of them read **the same** input word in
every cycle. Each has its own parameter buffer (weights), its own channel
parameters and its own output functions. One pass of M cycles therefore
produces S output channels of one output pixel.

### Runs and descriptors

Software describes a *run* with an `nnpe_desc_t` descriptor and pulses
`start`. A run is one layer, or a slice of one. The engine loops over
channel groups, then over output pixels, then over the M words:

```
for g in 0 .. n_groups-1            // S output channels per group
  for p in 0 .. n_pix-1
    for m in 0 .. m_words-1
      in  word  = in_base + p*pix_stride + m              (data input buffer)
      par word  = p_base  + g*m_words   + m               (every parameter buffer)
    out byte (p, g, s) = out_base + p*cout + (group_base+g)*S + s
    channel parameters: entry cp_base + g of SACC s
```

So the output of one pixel is a contiguous run of `cout` channel bytes. The
data buffers are N = 256 bytes wide, so a 1x1 convolution or a fully
connected layer can read the next layer's input straight back, with
`pix_stride = cout / N`.

A k x k convolution needs its k·k·Cin window laid out as the M words of one
pixel (im2col). This engine leaves that arrangement to the loader, because
the original design only requires that the buffers "provide M x N wide
data".

**Timing.** One word per cycle with no bubbles. With `start` in cycle c,
`done` pulses in cycle c + n_groups·n_pix·m_words + 6.

### Ping-pong data buffers

There are two data buffers of 4096 words of 256 bytes each (1 MiB each). That
holds the largest ResNet50 activation, 56x56x256 bytes. `buf_sel` says which
buffer is currently the *input* buffer.

A run with `desc.swap` set exchanges the roles when it finishes. A network
therefore runs layer after layer without its layer data leaving the chip,
which is the main power argument of the original design.

The two kinds of split work as follows:

- A layer split into several runs (for example, to reload weights) sets
  `swap` only on its last run.
- `group_base`, `p_base` and `cp_base` place each slice.

### Loading and reading out

These ports load the engine:

- `dw_*` writes 256-byte words into the current input buffer;
- `pw_*` writes a parameter-buffer word of one SACC vector (512 words each);
- `cw_*` writes channel parameters (256 entries per vector).

`ro_*` streams bytes of the current input buffer, which after a swapping run
is the result. It sends one byte per accepted beat (valid/ready). In the top,
this readout feeds the LSTM directly.

## LSTM accelerator (`lstm_accel`)

This is a cut-down NNPE with one SACC vector of N = 160 lanes.

**One time step.** A step computes four gate rows (i, f, g, o) for each of
the 512 hidden units, over the concatenated input z = [x ; h_prev]:

- x is 2048 bytes and h_prev is 512 bytes, so z is 2560 bytes, exactly 16
  words of 160.
- z is held in a small on-chip register file.
- The kernel streams in from outside, one 160-code word per accepted beat
  (`wt_*`), in the order unit j, gate i/f/g/o, word 0..15.

**Per gate row.**

1. The SACC accumulates the 16 words.
2. The output functions apply that row's bias and shift, then sigmoid (or
   tanh for g). The parameter entry is `q*512 + j`.
3. When the o gate arrives, `lstm_cell` updates c[j] and produces h[j].

**Between steps.** New h values go to a side memory, so the whole step still
sees h_prev. At the end they are copied into z and streamed out on `h_*`. A
step starts by itself as soon as 2048 x bytes have arrived. `seq_reset`
clears h and c.

**Timing.** A step needs 4·512·16 = 32,768 weight beats plus 512 cycles of
copy-out, which is 0.18 ms at 187.5 MHz if the weight stream never stalls.
The original system needed about 3 ms per step, because its kernels came
from DRAM. In this RTL the weight stream's bandwidth sets the step time, and
a missing beat simply stalls the step.

## HD classifier (`hd_classifier`)

The classifier processes a D = 4096-bit vector in W = 256-bit *chunks*
(16 per vector). This keeps the logic to W counters and W-bit memories
instead of 4096-bit ones.

### Mapping a frame to a hypervector (`hd_item_mem`, `hd_encoder`)

Feature k has a random *position* vector P[k]. Its value v, quantised to one
of 256 levels (`(v + 128) >> 0`, in general `>> (8 - log2 LEVELS)`), selects a
random *level* vector L[level]. The frame hypervector is the bitwise majority
of the K = 512 bound vectors:

```
H[d] = 1  iff  2 * #{k : (P[k] xor L[level(v_k)])[d] = 1} > K     (ties -> 0)
```

P and L belong to the trained model and are loaded into RAMs (`hd_pos_*`,
`hd_lvl_*`), as the lookup tables of the original design.

The encoder stores the 512 feature bytes. For each chunk it makes 512
lookups into W counters (one per cycle), then thresholds them. That takes
K + 2 = 514 cycles per chunk, or 8224 cycles (44 µs) per frame.

### Exemplar search with a sliding window (`hd_search`)

Each chunk is compared with the same chunk of every active class, one class
per cycle, and the popcount of the XOR is added into that class's distance
for the frame. This takes `num_classes + 1` cycles per chunk, hidden behind
the encoder.

After the last chunk, a window pass updates a running sum for every class:

```
sum[n] += dist_now[n] - dist[frame that leaves the window][n]
```

The pass reports the class with the smallest sum, with ties going to the
lower index. The result is `class_id`, the sum, and the number of frames in
the window. A window holds up to F = 12 frames and fewer right after a clear.
The average distance is sum / frames, so the smallest sum is also the
smallest average.

Frames from before the last window clear never count. The window restarts
when any of these happens:

- `hd_win_clear` (for example, a new video);
- the class count is set;
- a new class is committed, so that the new class competes on equal terms.

### Learning a new class (`hd_reconfig`)

1. `hd_train_start` with a class index clears 4096 16-bit counters. This
   takes 16 cycles.
2. From then on, every complete frame hypervector adds its bits into the
   counters, and inference carries on as usual.
3. `hd_train_stop` writes the exemplar `E[d] = (2·count[d] > frames)` into
   the exemplar memory, chunk by chunk, and pulses `hd_committed`.

Edge cases:

- A stop that arrives in the middle of a frame waits for that frame's last
  chunk.
- A frame already under way at the start is skipped.
- A stop with no frames writes nothing.
- Committing to an index at or above `hd_num_classes` grows the class count.
  This is how class 100 is added on top of a loaded 100-class model.
- The commit takes priority over host writes to the exemplar memory.

## Using the top (`hydrate_top`)

Everything below is done through ports.

**Once:**

- load the NNPE parameter buffers and channel parameters;
- load the LSTM gate-row parameters (`lstm_cw_*`);
- load the HD item memories and exemplars;
- set the class count (`hd_nc_*`).

**Per frame:**

1. Write the image (as prepared by a pre-processor) into the NNPE input
   buffer with `dw_*`.
2. Issue one descriptor per layer (slice), each time waiting for `nn_done`.
3. After the final layer, pulse `feat_start` with the word address of the
   2048 result bytes (`feat_base`). They stream into the LSTM. If the LSTM is
   still busy with the previous frame, the readout simply waits.
4. Feed LSTM kernel words whenever `lstm_wt_ready` is high.
5. The hidden state goes to the HD classifier by itself, and `class_valid`
   pulses with the result.

Do not overwrite the input buffer before the readout of a frame has ended.
Once it has, the NNPE can compute the next frame while the LSTM works on this
one.

**Training:** pulse `hd_train_start` (with the class index) and later
`hd_train_stop`, at any time.

## Departures from the original design, and what is missing

- The accelerators here pass their vectors by direct streams. In the original
  they exchanged data through DDR4 via DMA and AXI, under a real-time
  processor. The processors, DMA, register map, DDR4, camera and HDMI paths,
  and the pre- and post-processors are not part of this RTL.
- ResNet50's residual additions and the third "scratch" data buffer are not
  built. The original mentions that buffer as a further improvement. Layer
  sequencing and im2col preparation are left to software.
- Fig. 1 of the original shows a superclass level of exemplars, which is
  never described. The search here is flat over up to 101 classes.
- The two-stream (optical flow) configuration, an alternative in the
  original, is not built. The NNPE and the HD classifier are parameterised
  enough (K, F, D) to serve it.
- The original does not give these details, so they are choices of this RTL:
  - the weight-code bit layout;
  - the table formats;
  - the LSTM fixed-point formats;
  - the descriptor and buffer layout;
  - chunking;
  - the level quantiser;
  - all tie rules;
  - the class-count register;
  - all handshakes.
- Retraining existing exemplars after wrong matches, which the original
  suggests as a refinement, is not built as a separate mechanism. Training
  into an existing class index replaces that exemplar.
- The LSTM is much faster here (0.18 ms against about 3 ms per step) only
  because the weight stream is assumed to deliver a 640-bit word per cycle.

## Parameters (defaults)

| Block | Parameter | Default | Origin |
|---|---|---|---|
| NNPE | S, N | 8, 256 | original design |
| NNPE | BUF_DEPTH, PBUF_DEPTH, CP_DEPTH | 4096, 512, 256 | chosen (fits ResNet50 activations; buffer share as reported) |
| LSTM | N_L, X_LEN, H_LEN | 160, 2048, 512 | original design |
| HD | D, K, F, C_MAX | 4096, 512, 12, 101 | original design |
| HD | W, LEVELS, counter width | 256, 256, 16 | chosen |

## Verification

Each block has a self-checking testbench in `tb/`. Each one compares against
a reference model written from the arithmetic rules above, with
`tb/tb_ref_pkg.sv` providing `$exp`-based sigmoid and tanh, integer weight
factors and so on. Each prints `TB_RESULT checks=<n> failures=<n>`. Random
stalls are used on every valid/ready interface. Latencies given above (SACC,
NNPE run time, LSTM step beats, encoder chunk time) are checked in cycles.

- **`tb_hydrate_top`** (reduced sizes: 2x8 NNPE lanes, 4 LSTM lanes,
  D = 64, 4-frame window) runs ten frames through the whole chain. It fails
  if any of these never happened:
  - buffer swaps;
  - readout stalled by a busy LSTM;
  - weight-stream gaps;
  - NNPE and LSTM running at once;
  - LSTM sequence reset;
  - full and sliding windows;
  - a training commit;
  - class-count growth;
  - every output function.
- **`tb_hydrate_full`** runs the same scenario on `hydrate_top` at its
  default sizes, for 14 frames:
  - 100 classes are loaded;
  - the window fills;
  - class 100 is learned;
  - every result is checked.

  It runs in well under a minute.

- **`tb_nnpe_resnet_1x1`** runs the two 1x1 convolutions of a ResNet50
  conv2_x bottleneck on the NNPE at full size: 56x56x256 to 64 channels and
  back to 256. The first input fills 3136 of the 4096 buffer words. The test
  checks both run times and the 256 output channels of five pixels.

**Capacity limit.** A k x k convolution needs its im2col copy in the input
buffer. That copy fits for conv3_x to conv5_x of ResNet50, but not for
conv2_x (9408 words) or conv1. Those layers must be fed in row bands of at
most 1365 output pixels.

To run a testbench with Verilator 5 from the repository root (the activation
tables are read by relative path `rtl/...`):

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/hyd_pkg.sv tb/tb_ref_pkg.sv tb/tb_hydrate_top.sv --top-module tb_hydrate_top
./obj_dir/Vtb_hydrate_top
```

Replace the testbench name to run any other one.

**Lint warnings that remain.** Verilator reports two kinds:

- `SYNCASYNCNET` on `rst_n`, because the assertions use it in `disable iff`
  while the flops use it asynchronously;
- `UNUSEDSIGNAL` for descriptor fields that a module does not need.
