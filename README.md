# A stream-based BCPNN kernel in SystemVerilog

This is a hardware kernel for the rate-based Bayesian Confidence Propagation
Neural Network (BCPNN). It is a three-layer network (input, hidden, output)
that learns online with a local Hebbian-Bayesian rule.

- The input layer holds one image.
- The hidden layer learns a representation of it without labels.
- The output layer learns to map that representation to class labels.

Each call of the kernel processes one image in one of three modes: inference,
unsupervised training of the input→hidden projection, or supervised training of
the hidden→output projection. The host sequences the images, the epochs and
the mode of each call.

The main idea is to stream the large projection arrays from high-bandwidth
memory (HBM) through a chain of concurrent stages, and not to hold them on chip.
Those arrays are the weights w_ij and the joint-probability traces p_ij of
4096 × 1600 synapses.

- Four HBM channels are read side by side and merged into 64-word packets.
- Each packet is consumed in one clock cycle by an unrolled 64-lane datapath.
- While the weights flow through the support computation, the joint traces
  of the same rows flow through the plasticity pipeline and are written back.
- The stages pace each other only through valid/ready back-pressure, plus two
  gates that wait for the softmax (see *Gating*).

## The network and its arithmetic

Units are *minicolumns* grouped into *hypercolumns*; the minicolumns of one
hypercolumn are mutually exclusive values of one attribute.

| layer  | hypercolumns | minicolumns each | default |
|--------|--------------|------------------|---------|
| input  | `NI_HC` (one per pixel) | 2 (pixel p and 1−p) | 784 × 2 |
| hidden | `NH_HC` | `MH` | 32 × 128 = 4096 units |
| output | 1 | `NO` (classes) | 10 |

Each call computes the following, with input activities x_i, hidden activities
a_j and output activities o_k.

- **Input activities.** Each pixel p, clamped to [0,1], gives x_2n = p and
  x_2n+1 = 1−p.
- **Hidden support.** s_j = b_j + Σ_i m(h(j), hc(i))·x_i·w_ij.
  - m is the receptive-field mask; it is 1 everywhere when the mask is off.
- **Hidden activity.** a_j is the softmax of s_j within hypercolumn h(j).
- **Output support.** s_k = b_k + Σ_j a_j·w_jk.
- **Output activity.** o_k is the softmax over the NO outputs; `pred` is the
  argmax.

Training updates every trace with the same exponential moving average, with
the rate set by the shift `alpha_sh` in the call's constants:

    p ← p + (target − p) · 2^−alpha_sh

Then the biases and weights are recomputed from the traces:

    b_j = ln p_j        w_ij = ln p_ij − ln p_i − ln p_j

| mode | traces updated (targets) | rewritten in HBM |
|------|--------------------------|------------------|
| unsupervised | p_i ← x_i, p_j ← a_j, p_ij ← x_i·a_j | every row of p_ij and w_ij |
| supervised | p_j (second copy for this projection) ← a_j; p_k ← one-hot label; p_jk ← a_j·label_k | every row of p_jk and w_jk |
| inference | nothing | nothing |

The joint traces are updated for every synapse, whether or not the mask
connects it. The mask only removes terms from the support.

### Number formats

The kernel computes in fixed point, not in floating point.

| type | format | use |
|------|--------|-----|
| `fx_t` | Q8.24 (signed 32-bit) | activities, traces, weights, biases |
| `sup_t` | Q12.20 | supports (sums of up to 1600 terms) |

- The smallest trace is one LSB (2^−24). Traces saturate there so that ln
  stays finite; ln of it is about −16.6.
- The ln and exp functions in `bcpnn_pkg` use no tables. Each splits its
  argument into an integer power of two and a mantissa, and corrects the
  mantissa with one quadratic term:
  - log2(1+f) ≈ f + 0.3465·f(1−f), absolute error below 0.0053 in ln.
  - 2^f ≈ 1 + f − 0.3445·f(1−f), relative error below 0.34 %.
- The softmax subtracts the hypercolumn maximum, takes exp and sums. It then
  forms one reciprocal with a 49-step restoring divider and multiplies every
  exponential by it.

Against a real-valued reference, the testbenches accept these differences:

- 0.02 on hidden activities;
- 0.04 on output activities;
- a small absolute and relative margin on traces and weights.

## HBM layout and the merged packet

Every channel is a 512-bit valid/ready stream, 16 words per beat. Address
generation and the AXI masters are not part of the kernel: a channel is the
stream of beats that a burst read (or write) of one array produces, in order.

**Input→hidden arrays** (w_ij and p_ij, one array each).

- They are stored row-major: row j holds the `NI_PAD` = 1600 words that feed
  hidden unit j, with 2·784 = 1568 padded to a multiple of 64.
- The array is spread over four channels. Word i of each 64-word block lives
  on channel (i mod 64)/16, so channel c supplies words 16c..16c+15 of every
  packet.
- `hbm_merge` waits until all four channels have a beat and joins them into
  one 64-word packet.
- A row is therefore `NI_PAD/64` = 25 packets, and the whole array is 102 400
  packets.
- Writes do the reverse: `hbm_split` cuts each updated 64-word packet into
  four beats, and each channel drains on its own.
- w and p use separate channel groups, so eight read and eight write channels
  serve this projection.

**Hidden→output arrays** (w_jk and p_jk). These are not partitioned. Row j is
a single beat, with word k the value for class k; words k ≥ NO are padding and
carry no meaning, on reads or on writes. One channel per array per direction.

**Small streams.**

- **Constants:** one beat per call, with fields in word 0 (`consts_t`):
  - mode (bits 8:7): 0 inference, 1 unsupervised, 2 supervised;
  - mask enable (bit 9);
  - trace reset `init` (bit 10);
  - `alpha_sh` (bits 15:11);
  - label (bits 23:16).
- **Image:** `NI_HC/16` beats of 16 pixels in Q8.24.
- **Mask:** `NH_HC·NI_HC` bits, bit h·NI_HC+i set when hidden hypercolumn h
  sees input hypercolumn i, packed 512 per beat. It is read only when the
  call's mask bit is set; otherwise everything is connected.

**On-chip state.** State that is O(units) stays on chip between calls:

- p_i and ln p_i;
- p_j and b_j;
- the hidden→output copy of p_j and its ln;
- p_k and b_k;
- the hidden activities of the current call.

The constant `init` resets it all to uniform priors: p_i = 1/2, p_j = 1/MH,
p_k = 1/NO.

## Pipeline of one call

```
 const ─► read_constants ─┐
 mask  ─► mask_buffer ────┤           (load phase)
 image ─► input_activity ─┘ x, ln p_i
                                                     (run phase, all at once)
 w_ih ×4 ─► hbm_merge ─► hid_support ─► stream_fifo ─► softmax_unit ─► a_j, (p_j, b_j)
                                                                        │
 p_ih ×4 ─► hbm_merge ─[row j waits for a_j]─► trace_update ─► weight_update ─► hbm_split ─► ×4 p_ih, ×4 w_ih
                                                                        │
 w_ho ─────[row j waits for a_j]─► out_support ─► stream_fifo ─► softmax_unit ─► o_k, pred
 p_ho ─────[row j waits for a_j]─► trace_update ─► weight_update ─► hbm_split ─► p_ho, w_ho
```

The controller in `bcpnn_kernel` steps through four phases:

- **idle:** `start` is accepted.
- **constants:** one beat is read. Trace reset and the output trace update of
  a supervised call happen here.
- **load:** the mask and the image are read. This computes x, and in
  unsupervised mode updates p_i and ln p_i.
- **run:** every stream of the call starts. The call ends when all of these
  are true:
  - every hidden support has passed through the softmax;
  - the output softmax is done;
  - every write beat has been accepted.

  Then `pred` and `out_act` are valid and `done` pulses for one cycle.

The stream stages that are not needed in the current mode stay idle. A trace
channel holds `ready` low outside the mode that uses it, so the host need only
read the arrays that a mode uses:

| mode | reads | writes |
|------|-------|--------|
| inference | w_ih, w_ho | none |
| unsupervised | also p_ih | w_ih, p_ih |
| supervised | also p_ho | w_ho, p_ho |

### Gating: where the pipeline waits

Most of the pipeline is plain valid/ready. The hard part is that the softmax is
the only stage that must see a whole hypercolumn before it can emit anything.
Anything that needs a_j must wait for it.

- `hid_support` emits one support per row, every 25 cycles when the weights
  arrive without gaps.
- `softmax_unit` collects the `MH` supports of a hypercolumn, then spends
  about `MH + 49` cycles on exp, division and output.
- During that time the next hypercolumn's supports keep arriving. They queue
  in the FIFO and then in the support unit's output register, and back-pressure
  stalls the weight channels if both are full.
- The controller counts finished hypercolumns (`hc_done`).
  - A p_ih row j is admitted into `trace_update` only when hypercolumn j/MH is
    done.
  - A w_ho/p_ho row j is admitted only when `hc_done·MH` > j.
  - Before that, the row's channel simply sees `ready` low.

So the input→hidden update trails the support computation by about one
hypercolumn, and the output projection follows one hypercolumn behind. No
extra buffer holds a whole layer. The update pipeline (`trace_update`, then
`weight_update`, one register each) runs at one packet per cycle and reads x
and ln p_i straight from the input vector.

### Timing

- With no gaps on any channel, the run phase of a model-1 call takes about
  4096 × 25 = 102 400 cycles for the input→hidden stream.
  - Two packets per cycle when training: weights and traces in parallel.
  - The output projection (4096 beats) and the softmaxes hide inside it.
  - At 150–200 MHz that is 0.5–0.7 ms per image.
- The load phase adds about 100 cycles (49 pixel beats, 49 mask beats).
- The full-size testbench inserts random read gaps and write stalls and
  measures 175 000 to 227 000 cycles per call.

Latencies of the stages:

| stage | latency |
|-------|---------|
| `hid_support` | support out one cycle after a row's last packet |
| `softmax_unit` | first activity 2M+49 cycles after the first support of a group; M outputs, one per cycle |
| `trace_update`, `weight_update` | one register stage each |
| `hbm_merge` | one registered stage, full rate |
| `hbm_split` | takes a new packet once every channel has taken its beat |

## Modules

| module | role |
|--------|------|
| `bcpnn_pkg` | sizes, `fx_t`/`sup_t`/`beat_t`/`pkt_t`, the constants struct, fixed-point multiply, EMA, ln and exp |
| `bcpnn_kernel` | top: controller, on-chip state, gating, all instances |
| `read_constants` | takes the call's constants beat |
| `mask_buffer` | loads the receptive-field mask, or all ones |
| `input_activity` | pixels to x; p_i and ln p_i updates |
| `hid_support` | 64-lane masked dot product per packet, adder tree, bias, Q12.20 saturation |
| `stream_fifo` | valid/ready FIFO with fill level; checks the hold rule of the handshake |
| `softmax_unit` | per-group max, exp, reciprocal, scale; reused for hidden (M = MH) and output (M = NO) |
| `hbm_merge` | N channels to one packet |
| `hbm_split` | one packet to N channels |
| `trace_update` | LANES-wide p ← EMA(p, u_l·v) |
| `weight_update` | LANES-wide w = ln p − ln u_l − ln v |
| `out_support` | 16 accumulators over hidden→output beats, gated by available activities |

Parameters of the top, all defaulting to the MNIST model:

| parameter | default | meaning |
|-----------|---------|---------|
| `NI_HC` | 784 | input hypercolumns (pixels) |
| `NI_PAD` | 1600 | row length of the input→hidden arrays: 2·NI_HC rounded up to 64 |
| `NH_HC` | 32 | hidden hypercolumns |
| `MH` | 128 | minicolumns per hidden hypercolumn |
| `NO` | 10 | classes (at most 16) |
| `FIFO_DEPTH` | 16 | depth of the support FIFO |
| `LEARN` | 1 | 0 builds the inference-only kernel |
| `STRUCT` | 1 | 0 builds without the mask buffer |

The three builds are:

- **full:** `LEARN=1, STRUCT=1`.
- **training only:** `LEARN=1, STRUCT=0`.
- **inference only:** `LEARN=0, STRUCT=0`. There is no trace or weight update
  hardware, the write channels stay low, and a training request runs as
  inference.

Other reported models need only parameter changes:

| model | NI_HC | NI_PAD | MH | NO |
|-------|-------|--------|----|----|
| 32 × 256 hidden units, 2 classes | 784 | 1600 | 256 | 2 |
| 64 × 64 images, 2 classes | 4096 | 8192 | 128 | 2 |

## Where this design departs from the original accelerator

The original was written in HLS with single-precision floating point. This RTL
keeps its structure but differs in these points:

- **Fixed point** (Q8.24 / Q12.20) instead of FP32, with approximate ln and
  exp (errors above).
  - Results match a real-valued model to about 1e−2, not bit for bit.
  - Very small traces saturate at 2^−24.
- **Dense weight rows.** Every row of w_ih is read in full, even when the mask
  connects a hidden hypercolumn to only a subset of the inputs. The original
  may fetch only the connected part, which would explain its shorter time per
  image; how it does so is not described.
- **Structural plasticity** (choosing each hidden hypercolumn's receptive field
  between epochs) is left to the host. The kernel only applies the mask it is
  given.
- **Stages named but not specified** are folded into `hid_support`: the
  original's dendritic-activity and bias-weighted-support steps. The sum,
  mask and bias are all applied there.
- **Sequencing, layouts and encodings are this design's own:**
  - the constants beat;
  - row-major arrays;
  - the channel assignment within a packet;
  - the mask bit order;
  - the two-minicolumn pixel code;
  - the gating rule;
  - the FIFO depth, which the original sized by co-simulation.
- **Host side not included.** The host program, PCIe/DMA, the HBM controllers
  and the AXI masters are not included.
- **On-chip state is kept in flip-flops.**
  - The arrays are cleared by the trace-reset constant in one cycle, and the
    support and output units read the bias and activity vectors whole.
  - This simulates fast, but a synthesis flow will not map these arrays to
    block RAM.
  - A RAM-friendly version would clear them over NH cycles and read them
    through one port per consumer.

## Simulation

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=… failures=…`. `tb_ref_pkg` holds the real-number helpers
shared by the testbenches. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal \
    rtl/bcpnn_pkg.sv tb/tb_ref_pkg.sv rtl/*.sv tb/tb_softmax_unit.sv \
    --top-module tb_softmax_unit
./obj_dir/Vtb_softmax_unit
```

Replace the last file and the top with any other testbench. The kernel-level
testbenches are:

- **`tb_bcpnn_kernel`** runs a reduced network: 48 pixels, 3 × 4 hidden units,
  3 classes, a 4-deep FIFO.
  - 14 calls mix all three modes, with and without the mask, on an HBM model
    with random gaps and stalls.
  - It checks every activity, prediction, written trace and weight against a
    real-valued reference.
  - It counts how often each mechanism occurs: full FIFO, gated rows, write
    stalls, read gaps, each mode, mask on and off, trace reset. A mechanism
    that never occurs counts as a failure.
- **`tb_bcpnn_kernel_full`** runs the kernel at its default size (model 1)
  for three calls: unsupervised with mask and reset, supervised, inference.
  - About 13 million checks; a few seconds after the build.
- **`tb_bcpnn_kernel_infer`** covers the inference-only build.
