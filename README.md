# A Monte Carlo Dropout accelerator for Bayesian neural networks

A Bayesian neural network inferred with Monte Carlo Dropout (MCD) gives an
uncertainty estimate by running the same input through the network S times,
each time with a different random set of dropped filters, and averaging the S
outputs. Done naively this costs S full forward passes. This RTL implements
the FPGA accelerator architecture of Fan et al., "High-Performance FPGA-based
Accelerator for Bayesian Neural Networks" (DAC 2021), which cuts that cost in
two ways:

* **Partial Bayesian inference.** Dropout is applied only in the last L of the
  N layers. The first N-L layers act as a deterministic feature extractor and
  only the last L layers have to be repeated S times.
* **Intermediate-layer caching (IC).** The deterministic layers run once and
  their result stays in memory. When only the last layer is Bayesian (L = 1),
  its input even stays in the on-chip input buffer, so samples 2..S read no
  feature map from memory at all.

The dropout masks come from a small hardware Bernoulli sampler (two 128-bit
LFSRs and an AND gate for a drop rate of p = 0.25). Because MCD drops whole
filters, the engine needs only one mask bit per output filter per sample.

Everything is SystemVerilog-2017 in `rtl/`, with one self-checking testbench
per module in `tb/`. The default parameters are the original design's main
configuration: PC = 64 channels, PF = 64 filters, PV = 1 pixel, 8-bit data.

## 1. Running a network: layers, samples and caching

The accelerator runs one layer at a time on a single engine. A host writes one
*layer descriptor* per layer into the controller's table, then starts a run
with four numbers:

| input       | meaning                                              |
|-------------|------------------------------------------------------|
| `n_layers`  | N, layers in the network                             |
| `l_bayes`   | L, how many trailing layers apply dropout            |
| `s_samples` | S, Monte Carlo samples                               |
| `ic_en`     | intermediate-layer caching on or off                 |

The controller then executes this schedule:

```
ic_en = 0:  repeat S times: layers 0 .. N-1            (dropout in N-L .. N-1)
ic_en = 1:  layers 0 .. N-L-1 once, then
            repeat S times: layers N-L .. N-1          (dropout in all of them)
            with L = 1, samples 1..S-1 skip loading the last layer's input
```

Each layer reads its input map from off-chip memory and writes its output map
back. The next layer then reads that output as its input. The exception is the
last layer of the network: sample s writes its output at
`out_addr + s * (PH*PW*FG)`, so the S results sit side by side. The host
averages them; the hardware does not. Compared with repeating everything, IC
removes (N-L) x (S-1) layer executions. With L = 1 it also removes S-1 input
loads.

A layer is run as follows:

1. Load the input map into the input buffer (skipped when it is cached).
2. For each group g of PF output filters:
   1. Load the group's batch-norm entries and weights.
   2. If the layer is Bayesian, pop one PF-bit mask from the sampler.
   3. Stream the group's output pixels through the engine.
   4. Wait until the last output has left the dropout unit.
3. Wait until every output word has been written to memory.

There is no double buffering. Each filter group's weight load is exposed.

## 2. The engine datapath

```
            input buffer (PC bytes/word) ──┐
                                           ▼
 controller ─ addresses ─►  processing engine: PF units x PV x (PC mult + adder tree)
                                           │ 32-bit sums, one per filter
                                           ▼
                      functional unit per filter: BN ─► ReLU ─► max-pool ─► shortcut add
                                           │ 8-bit
                                           ▼
                      dropout unit: PF multiplexers, zero where mask bit = 1
                                           │
                            output queue ─►  memory interface ─► off-chip memory
```

**Processing engine** (`processing_engine` → `processing_unit` → `mac_tree`).
Each cycle the engine takes one *beat*: PC input channels of one pixel, and the
matching PC weights of each of the PF filters. A `mac_tree` multiplies PC
signed 8-bit pairs and sums them in a binary adder tree. Each of the PF
processing units holds PV such trees (one per pixel in flight) and an
accumulator. The controller frames each output pixel with `first`/`last` flags.
The pixel's beats cover every kernel position (ky, kx) and every channel tile
ct (CT = C/PC tiles). The sums come out three cycles after the `last` beat.
At PF = PC = 64 that is 4096 multiply-accumulates per cycle.

**Functional unit** (`functional_unit`, one per filter). It has four registered
stages, in the order the original design prints them:
* **BN.** `y = sat8((acc*scale + bias + 2^(shift-1)) >> shift)`. Batch
  normalisation and 8-bit requantisation are folded into one integer
  multiply-add. `scale` is a signed 16-bit value and `bias` a signed 32-bit
  value, one pair per filter. `shift` is set per layer.
* **ReLU.** Optional.
* **Max-pool.** Takes the maximum of `pool*pool` consecutive values.
* **Shortcut.** Adds the residual operand, saturating to 8 bits.

The pool stage works without line buffers because of the order the controller
issues pixels in. It takes one pooled output at a time and issues all the
conv pixels of that pooling window back to back. The dropout scale
1/(1-p) is not a separate multiplier. Fold it into the BN `scale` of the
Bayesian layers when preparing the weights.

**Dropout unit** (`dropout_unit`). This is just PF multiplexers. In a Bayesian
layer, filter f's output is forced to zero when bit f of the current mask is 1.
The mask is filter-wise, so one mask covers every pixel of a filter group in one
sample.

**Buffers.**
* The input buffer (`input_buffer`) holds a whole input map. Its default size
  is 16384 words of 64 bytes (1 MiB).
* The weight buffer (`weight_buffer`) holds the weights of one filter group.
  Its default size is 128 words, each word holding PF x PC bytes. That covers
  K·K·C/PC up to 128, for example 3x3 kernels over 1024 channels.
* The weight buffer has one bank per filter, so a single read returns the
  weights for all PF filters.

## 3. Bernoulli sampler

`bernoulli_sampler` is built from these parts:
* Two `lfsr`s. Each is a 128-register Fibonacci LFSR with XOR feedback from R127,
  R126, R125 and R120 into R0, and its output taken at R127.
* An AND of the two LFSR bits. The result is 1 with probability 1/4, which
  means "drop".
* A `sipo` that packs PF successive bits into a mask. The first bit goes to
  filter 0.
* A `sync_fifo` of 16 masks.

The LFSRs and the SIPO only advance while the FIFO has room. So the n-th mask
ever popped is a fixed function of the seeds, regardless of timing. That is what
lets a testbench predict the masks exactly. Each LFSR needs a nonzero seed; a
zero seed is replaced by 1. The host supplies the seeds on the `seed` port,
and they are loaded during reset.

Other drop rates follow the same idea. For example, three LFSRs give p = 1/8.
The `N_LFSR` parameter sets the number of LFSRs, but the top instantiates 2.

## 4. Controller: the loop nest and flow control

For a filter group, the controller issues one beat per cycle from this loop
nest (innermost last):

```
for py < PH, px < PW                      pooled output pixel
  for wy < pool, wx < pool                position in the pooling window
    for ky < K, kx < K, ct < CT           one beat
      oy = py*pool + wy ;  iy = oy*stride + ky - pad     (x likewise)
      input word  = (iy*W + ix)*CT + ct   (zeros if (iy, ix) is outside the map)
      weight word = (ky*K + kx)*CT + ct
```

Each output pixel therefore takes `pool² · K² · CT` cycles.

**Output credit.** The beat that completes a pooled pixel also pushes that
pixel's output address into a tag FIFO. The tag leaves the FIFO when the
pixel's data leaves the dropout unit, and the pair {address, data} then enters
the output queue. The controller holds this completing beat while
`tags in flight + output queue entries >= OUTQ_DEPTH`. This way the pipeline
never has to stall, and a slow memory can never overflow the queue.

**Shortcut operand.** For a layer with a shortcut, the controller requests the
pixel's residual word when it issues the pixel's first beat. The pixel's
completing beat is held until the residual FIFO holds more words than there are
pixels in flight. The SC stage pops the word when the pooled value reaches it.

**Events.** The top reports an IC skip, an output-credit stall, a shortcut wait
and a mask wait on one-cycle `ev_*` outputs.

## 5. Memory interface and data layout

There is one word format everywhere: a word is PC bytes = 512 bits, one beat
of the memory bus. The memory port has two independent channels:

* **Read.** `m_rd_req`/`m_rd_addr` are accepted on a cycle with `m_rd_gnt`.
  The data return in order, any number of cycles later, on
  `m_rd_valid`/`m_rd_data`.
* **Write.** `m_wr_req`/`m_wr_addr`/`m_wr_data` are accepted on a cycle with
  `m_wr_gnt`.

`mem_interface` executes one read burst at a time for the controller. It
routes every returned word to the input buffer, the weight buffer, the BN
registers or the residual FIFO. It also drains the output queue into the write
channel.

The layouts below use word addresses:

| data                | layout                                                                  |
|---------------------|-------------------------------------------------------------------------|
| feature map         | word `(y*W + x)*CT + ct` = channels `ct*PC .. ct*PC+PC-1` of pixel (y,x) |
| filter group g      | starts at `w_addr + g*(BN_BEATS + K*K*CT*PF)`                             |
| · BN entries        | `BN_BEATS` = PF·64/(PC·8) words, 8 entries of 64 bits per word: `[63:48]` scale, `[31:0]` bias |
| · weights           | word `((ky*K + kx)*CT + ct)*PF + f` = filter f's weights for that input word |
| output / residual   | word `(py*PW + px)*FG + g`, byte f = filter `g*PF + f`                    |

Because PF = PC, a layer's output has exactly the feature-map layout the next
layer reads. A fully connected layer is a K x K convolution without padding
over a K x K map, or a 1x1 convolution over a 1x1 map.

## 6. Layer descriptor (`bnn_pkg::layer_desc_t`)

`in_addr`, `out_addr`, `w_addr`, `res_addr` (word addresses); `h`, `w` (input
size); `ph`, `pw` (output size after pooling, `(h + 2·pad − K)/stride + 1`
divided by `pool`); `ct` = C/PC; `fg` = F/PF; `k`; `stride`; `pad`; `pool`
(1 = none); `bn_shift`; `relu_en`; `sc_en`. Channel counts that are not
multiples of 64 are padded with zero channels and zero weights.

## 7. Parameters (top `bnn_accel`)

| parameter    | default | origin                                              |
|--------------|---------|-----------------------------------------------------|
| `PF`         | 64      | original design (filter parallelism)                |
| `PC`         | 64      | original design (channel parallelism)               |
| `PV`         | 1       | original design (vector parallelism); the top needs 1 |
| `IB_DEPTH`   | 16384   | this design: 1 MiB input buffer                     |
| `WB_DEPTH`   | 128     | this design                                         |
| `MAX_LAYERS` | 128     | this design: enough for ResNet-101                  |
| `FIFO_DEPTH` | 16      | this design: mask FIFO depth                        |
| `OUTQ_DEPTH` | 16      | this design: output queue depth                     |

The original design also lets PC and PF range over {8, ..., 128} and PV over
{1, 4, 8, 16}. The leaf modules accept any power-of-two PC and any PF and PV.
The top is written for PV = 1 and PF = PC.

## 8. What follows the original design and what is this design's own

**Taken from the original design:**
* The block structure: interface, Bernoulli sampler, and an engine with
  controller, input and weight buffers, PE, FU and DU.
* PF x PV x PC parallelism, with PC multipliers and an adder tree.
* The FU order BN, ReLU, Pool, SC.
* The multiplexer dropout unit with filter-wise masks.
* The sampler: two 128-bit 4-tap LFSRs, AND, SIPO, FIFO. The tap positions
  R120, R125, R126, R127 come from the original figure. Whether they give a
  maximal-length sequence has not been checked.
* 8-bit data, layer-by-layer execution through off-chip memory, partial
  Bayesian inference and IC.

**Chosen here (the original leaves them open):**
* All interfaces and handshakes, the descriptor table and the memory layouts.
* The integer BN formulation, max pooling, and the pooling-window pixel order.
* The mask polarity (1 = drop) and the SIPO bit order.
* The accumulator width, buffer depths, FIFO depths and pipeline registers.
* The credit-based flow control.

**Known differences and limits:**
* The shortcut is added after ReLU, following the printed FU order. A standard
  ResNet block adds before its last ReLU. Such a network must be trained, or
  re-expressed, for this order.
* Channel padding to 64 makes a 3-channel 224x224 image take 50176 words, more
  than the 16384-word input buffer. A 224x224 ImageNet network's first layer
  has to be split by the host; all later ResNet-101 layers fit.
* No double buffering of weights, and one read burst in flight at a time.
  The RTL therefore does not claim the original's measured latencies.
* Averaging over the S samples, the aPE/ECE metrics and the design-space
  exploration framework are host software and are not part of the RTL.

## 9. Simulating

Each `tb/tb_<module>.sv` is self-checking. It prints
`TB_RESULT checks=N failures=M` and has a watchdog. To build and run one with
Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/bnn_pkg.sv tb/tb_bnn_accel.sv \
          --top-module tb_bnn_accel -Mdir obj && obj/Vtb_bnn_accel +verilator+rand+reset+2
```

(Add `-Wno-fatal` if your lint settings turn warnings into errors.)

`tb_bnn_accel` runs the top at its default size with the memory model
`tb/ddr_model.sv`. It builds in about 1.5 minutes and runs in about a second.
The test network has three layers:
* a strided, padded 3x3 convolution with two filter groups and 2x2 max pooling;
* a 1x1 convolution over two channel tiles, with a shortcut;
* a fully connected layer.

It runs this network twice: with IC on, L = 1, S = 3, and with IC off, L = 2,
S = 2. A reference model in the testbench replays the schedule with its own
LFSR model. The testbench compares every memory word, the number of engine
beats, the number of words read, and the IC skip count. It also checks that
every mechanism happened at least once: IC reuse, dropped filters, padding,
pooling, shortcut, shortcut wait, output-queue stall, and a full mask FIFO.

A mask wait does not occur in this test. The sampler makes a 64-bit mask every
64 cycles, while loading one filter group's weights alone takes at least 64
memory beats. So the sampler is never the bottleneck at this size. `tb_controller` covers
the mask wait instead: its mask source is a random stub that is often empty.

The unit testbenches run at small parameters (for example PF = 4, PC = 8,
PV = 2), except where the default size is cheap.
