# A 100-Gsample/s CNN equalizer in SystemVerilog

An intensity-modulation / direct-detection fiber link at 40 GBd, sampled twice per symbol,
delivers 80 Gsamples/s to the receiver. Inter-symbol interference and the non-linear
distortion of such a link can be undone by a small one-dimensional convolutional neural
network (CNN). This RTL computes that network at the full line rate. Three ideas make that
possible:

* one CNN instance computes `V_p = 8` symbols per pass and accepts 8 new samples every cycle;
* 64 instances work side by side, each on its own sub-sequence of the input;
* the sequence is cut into sub-sequences with enough overlap that the cuts leave no trace in
  the output.

At 200 MHz the 64 instances give a raw rate of `64 * 8 * 200 MHz = 102.4 Gsamples/s`. What
remains after the overlap depends on the sub-sequence length `l_inst`. A small look-up table
picks `l_inst` per sequence from the throughput asked for, trading latency against rate.

The RTL follows the architecture of the paper *CNN-Based Equalization for Communications:
Achieving Gigabit Throughput with a Flexible FPGA Hardware Architecture*. That paper built its
design with high-level synthesis. Everything here is written from its description, and where
the description stops, the choices are this design's own. They are listed in
[Where this design departs from the paper](#where-this-design-departs-from-the-paper).

## The network

| layer | in channels | out channels | kernel K | stride | activation |
|-------|-------------|--------------|----------|--------|------------|
| 1     | 1           | C = 5        | 9        | 8 (= V_p) | ReLU    |
| 2     | 5           | 5            | 9        | 1      | ReLU        |
| 3     | 5           | 8 (= V_p)    | 9        | 2 (= N_os) | none    |

Layer 1 has stride `V_p`, so each of its output positions stands for 8 input samples. The last
layer has stride `N_os = 2` and 8 output channels. Each of its output positions is flattened
into 8 consecutive symbols. The net effect is 8 symbols out for every 16 samples in (two
samples per symbol). Symbol `p*8 + o` is channel `o` of output position `p`.

Number formats:

* Activations (samples, hidden values, soft symbols) are 10-bit two's complement.
* Weights are 13-bit two's complement.
* A batch-normalisation layer is folded into the weights plus a 24-bit offset per output
  channel. The offset is added at accumulator scale.

Each output value is computed as

```
y[o] = sat10( act( (sum over i, k of win[k][i] * w[o][i][k] + b[o]) >>> 10 ) )
```

The arithmetic shift of 10 bits and the saturation are this design's requantisation. The
paper states the bit widths but not the binary point of each layer. With a different training
format, change `SHIFT` (or scale the weights accordingly).

The convolution window is causal: `win[K-1]` is the newest position and `k = 0` is the oldest.
A centred window would give the same values, only delayed by `(K-1)/2` positions. The overlap
scheme below absorbs that delay, so no zero padding is built into the layers.

### Coefficient bank (`coef_bank`)

All 648 coefficient words live in one register array. They are written one word per cycle
through `coef_we / coef_addr / coef_wdata`. The bank feeds all 64 instances, which share the
same trained network. The address map, with `C=5, K=9, V_p=8`:

| addresses | contents |
|-----------|----------|
| `o*K + k` (0..44) | layer 1 weight `w[o][0][k]` |
| `C*K + o` (45..49) | layer 1 offset `b[o]` |
| `50 + (o*C + i)*K + k` | layer 2 weight `w[o][i][k]` |
| `50 + C*C*K + o` (275..279) | layer 2 offset |
| `280 + (o*C + i)*K + k` | layer 3 weight, `o` in 0..7 |
| `280 + V_p*C*K + o` (640..647) | layer 3 offset |

Weights use the low 13 bits of a word and offsets all 24 bits. A write becomes visible on the
next cycle. Change coefficients only while no sequence is in flight.

## One CNN instance (`cnn_instance`, `conv_layer`)

Each layer is a streaming engine that is fully parallel over kernel taps, input channels and
output channels. The largest one, layer 2, has 225 multipliers. A layer keeps a window of the
last K input positions. Every accepted beat shifts `IN_POS` new positions into the window,
and an output is produced every `STRIDE / IN_POS` beats. Layer 1 gets 8 positions per beat
with stride 8, so it fires every beat. Layer 2 fires every beat. Layer 3 fires every second
beat.

Each layer has three register stages: window, products/sum, requantised output. The
instance therefore has a latency of 10 cycles from the first input beat to the first output
beat: 3 per layer, plus one beat that layer 3 must wait for because of its stride.
Throughput is one 8-sample beat per cycle in and one 8-symbol beat every second cycle out.

Flow control is a global stall. The whole layer pipeline advances only when the output beat
is not blocked (`en = !(out_valid && !out_ready)`). `in_ready` equals that enable, so a
blocked output freezes every layer at once. The instance never drops or duplicates a beat.
Inside the tree the output is never blocked for long, because the merge FIFOs hold a whole
block.

The instance does not clear its windows between blocks. The few outputs at the start of a
block that still see the previous block's samples all fall inside the left overlap, and that
part of the output is discarded (next section).

Each beat carries a two-bit tag `{seq_last, blk_last}`. It travels through the pipeline with
the data, so every module downstream knows where blocks and sequences end.

## Cutting a sequence into overlapping blocks

This is the part that needs the most care.

### How much overlap

An output symbol depends on a window of input samples, its receptive field. For this network
the receptive field of one output position spans 17 layer-1 positions, which is
`16*8 + 9 = 137` samples. The paper
defines the symbol overlap `o_sym = (K-1)(1 + V_p(L-1))/2 = 68` samples on each side. It then
rounds that up so that every side of a block is a whole, even number of input beats:

```
o_act = nextEven( ceil(o_sym / (N_i*V_p)) ) * N_i*V_p = 2 * 512 = 1024 samples = 2 beats
```

Here `N_i*V_p = 512` samples is one input beat. Each block therefore holds `l_inst` new
samples with 1024 samples of context in front and 1024 behind. After the network, the context
becomes `1024 / N_os = 512` symbols on each side, exactly one output beat, and it is dropped.

### Why the output is exact

Take block `n` of a sequence `x`. It starts at sample `n*l_inst - o_act` of the stream
`z = (o_act zeros, x, zeros)`. The left overlap, 1024 samples, is longer than the receptive
field, 137 samples. So every kept output symbol of the block sees only samples of `z`. It
sees nothing left over in the instance from the previous block, and nothing from the block
edge. Kept symbol `q` of the sequence therefore equals symbol `q + o_act/2` of the network
run once over the whole of `z`.

The end-to-end testbenches check exactly this identity, symbol by symbol, against an
independent integer model.

With a causal window, part of the right overlap is not strictly needed. It is kept so the
block format is symmetric and follows the paper's.

### Overlap generate module (`ogm`)

The `ogm` turns a sequence of input beats into the block stream. With `l = l_inst / 512`
beats and `OB = 2` overlap beats:

* block 0 is `OB` zero beats followed by the first `l + OB` input beats;
* every later block first replays the last `2*OB` beats it sent, then passes `l` new input
  beats.

The `2*OB`-beat history buffer is the only storage. Input is never read twice. When
`in_last` has been seen, the `ogm` keeps emitting zero beats until the block whose kept part
covers the last input beat is complete. That block is tagged `seq_last`. So a sequence of `R`
input beats becomes `ceil(R / l)` blocks of `l + 2*OB` beats, and its last output beat may
hold symbols computed from zero fill. `l_inst` is sampled at the first beat of a sequence and
held until its last block is out. While replaying, the module back-pressures its input.

### Overlap remove module (`orm`)

At the output of the merge tree each block is `(l + 2*OB)/2` beats of 512 symbols. The `orm`
drops the first and the last `DROP = OB/2 = 1` beat of every block. It drops the leading beat
by counting. It drops the trailing beat by holding `DROP` beats in a small buffer: a beat
leaves only after `DROP` newer beats of the same block have arrived. `out_last` leaves with
the final kept beat of a `seq_last` block. The slicer then takes hard decisions
(`bit = soft >= 0`, PAM2 levels at ±1).

## The split / merge tree (`eq_tree`, `ssm`, `msm`, `stream_fifo`)

`eq_tree` is recursive. A tree of N instances is:

* a split stream module (`ssm`);
* two trees of N/2 instances;
* a merge stream module (`msm`).

A tree of one instance is a `cnn_instance`. For N = 64 this gives the 63 split and 63 merge
modules of the paper's layout. The hierarchy keeps every wire short, which was the paper's
reason for it.

* **ssm.** Input beats are W samples wide and each output is W/2 wide. Whole blocks go
  alternately to output 0 and output 1. Each output has a FIFO of full input beats, which it
  hands out as the lower half and then the upper half. The input can therefore run at the full
  rate while each output drains at half its width. The tag goes with the upper half, so a
  block ends correctly on the narrower stream.
* **msm.** The mirror image. Each input FIFO collects pairs of W-symbol beats into one
  2W-symbol word. The output takes one whole block from input 0, then one from input 1, and so
  on. Block order is therefore restored by construction, because the split side dealt the
  blocks in the same alternation. A block must have an even number of beats at every merge
  input. An assertion checks this.
* **FIFO sizing.** Every FIFO holds one maximal block: `L_MAX + 2*o_act` samples, with
  `L_MAX = 16384` by default. A split output can then take a whole block while its sibling is
  still busy, and a merge input can take a whole block while the other input is emitting.
  Together with the alternation this keeps every instance busy. In the steady state the tree
  accepts one 512-sample beat per cycle.

The alternation only stays aligned if every block is divisible down the tree. At each level
the block must split into whole beats, and each instance must get an even number of 8-sample
beats because layer 3 has stride 2. Both hold when `l_inst` is a multiple of
`2*N_i*V_p = 1024` samples. The table below only ever selects such lengths.

## Choosing the sub-sequence length (`linst_lut`)

Every block costs `l_inst + 2*o_act` samples of work for `l_inst` useful samples, so

```
T_net = N_i*V_p*f / (1 + 2*o_act / l_inst)
```

The latency grows linearly with `l_inst`. The table is indexed by the requested throughput
`t_req`, in Gsamples/s (0..127). It returns the shortest `l_inst` that is a multiple of the
granularity (1024 samples) and reaches `T_net >= t_req`. If even `L_MAX` does not reach
`t_req`, the table returns `L_MAX` and raises `treq_unmet`.

The table is computed at elaboration by a function in the module, so changing `N_i`, `f`,
`o_act` or the granularity regenerates it. Some entries with the defaults:

| t_req (Gsamples/s) | l_inst (samples) | T_net (Gsamples/s) |
|--------------------|------------------|--------------------|
| 40  | 2048  | 51.2 |
| 80  | 8192  | 81.9 |
| 90  | 15360 | 90.4 |
| 91  | 16384 | 91.0 |
| 92 and up | 16384, unmet | 91.0 |

With the granularity set to 8 samples (`GRAN = 8`), the 80 Gsamples/s entry is 7320. That is
the value the paper reports. The testbench checks this too. The tree of this design cannot
split such a length evenly, so the top uses the 1024 granularity.

### Latency

The paper estimates the latency as the time to fill the split tree. Its split modules stall
the input while they write one half-width output, so every tree level adds half a block time:
`log2(N_i) * (l_inst + 2*o_act) / (2*V_p*f)`. With the paper's `l_inst = 7320` this comes to
about 17.6 µs.

The split modules here buffer whole input beats in their output FIFOs, so the input does not
wait for the narrower outputs. The fill time is then bounded by one block time. In the
full-size simulation at 80 Gsamples/s, the first output beat leaves 402 cycles (2.0 µs) after
the first input beat. The paper's formula gives 3840 cycles for the same `l_inst`. The price
is FIFO memory for one block per port.

## Top level (`cnn_equalizer_top`)

```
t_req -> linst_lut -> l_inst
in (512 samples/beat) -> ogm -> eq_tree (64 x cnn_instance) -> orm -> slicer -> out
coef port -> coef_bank -> all instances
```

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock (200 MHz target), synchronous active-low reset |
| `t_req` | in | 7 | requested throughput in Gsamples/s. It must be stable from the first beat of a sequence. |
| `in_valid/in_ready` | | 1 | input handshake |
| `in_data` | in | 512 x 10 | samples, element 0 is the earliest |
| `in_last` | in | 1 | marks the last beat of a sequence |
| `coef_we/coef_addr/coef_wdata` | in | 1/10/24 | coefficient write port (map above) |
| `out_valid/out_ready` | | 1 | output handshake |
| `out_soft` | out | 512 x 10 | equalized soft symbols, element 0 is the earliest |
| `out_bits` | out | 512 | hard decisions |
| `out_last` | out | 1 | marks the last beat of a sequence |
| `linst`, `treq_unmet` | out | 17/1 | current table output |
| `busy` | out | 1 | high while the overlap generator is inside a sequence |

A sequence of `R` input beats yields `ceil(R / l) * l / 2` output beats, where
`l = l_inst / 512`. Each output beat carries 512 symbols for 1024 input samples. Output beat
`j` holds the symbols for input beats `2j` and `2j+1`. Beats past the sequence end were
computed from zero fill. A new sequence can start as soon as `busy` falls.

All parameters default to the paper's configuration. They can be reduced for fast
simulation, for example `NI = 4`, as the end-to-end testbench does.

## Verification

Every testbench in `tb/` checks itself and ends by printing
`TB_RESULT checks=<n> failures=<n>`. The reference for the network is `cnn_ref_pkg`, an
integer model. It evaluates each layer position by position over a whole array, with none of
the RTL's structure, and uses the coefficient bank's address map.

| testbench | what it checks |
|-----------|----------------|
| `tb_conv_layer` | layer 1 and layer 3 shapes against the model; 3-cycle latency; random stalls |
| `tb_cnn_instance` | full network against the model; full rate (no stall); latency 10; random gaps and back-pressure |
| `tb_ssm`, `tb_msm` | block alternation, halves and pairs, tags, stalls when a FIFO fills |
| `tb_ogm` | blocks built by the `z`-definition above, tags, zero fill, several `l_inst` |
| `tb_orm` | removal of `DROP` beats at both ends, `out_last`, back-pressure |
| `tb_linst_lut` | every table entry against the throughput formula in floating point (reaches the target, minimal, multiple of the granularity); 7320 with the paper's granularity |
| `tb_coef_bank` | address map, reset, write timing, out-of-range writes |
| `tb_slicer` | decision rule including 0, -1 and the extremes |
| `tb_cnn_equalizer_top` | 4 instances, several sequences and `t_req` values, a coefficient reload; every symbol and bit against the model. Counts input stalls, output back-pressure, zero fill, multi-block sequences, both tree sides, `l_inst` changes and an unmet request, and fails if any count is zero. At full rate, 10 blocks take 381 cycles against the model's 380. |
| `tb_cnn_equalizer_full` | the top with its default parameters (64 instances, 512-sample beats): a 3-block sequence at 80 Gsamples/s (61 cycles, model 60; first output 402 cycles after the first input, bound 3840) and one at 40 Gsamples/s, each symbol against the model |

Each testbench was also run against a deliberately broken copy of its module, and each
reported failures.

To run a testbench with Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_cnn_equalizer_top \
    -y rtl -y tb +libext+.sv rtl/cnneq_pkg.sv tb/cnn_ref_pkg.sv tb/tb_cnn_equalizer_top.sv
./obj_dir/Vtb_cnn_equalizer_top
```

The full-size testbench takes about two minutes to build with `-j 8` and under a second to
run.

## Where this design departs from the paper

* **Granularity of `l_inst`.** This design uses multiples of 1024 samples, where the paper
  uses 7320 at 80 Gsamples/s. The throughput target is met, with a block about 12 % longer
  and so a proportionally longer latency.
* **Input width.** The tree is fed 512 samples per cycle, one beat for all instances. This
  matches the 512 symbols per batch the paper quotes for its high-throughput build. How the
  paper's design receives those samples from outside is not described.
* **Causal windows, no padding.** The layer table of the paper prints a padding of 10, which
  does not match its feature-map sizes. Edges are handled entirely by the overlap.
* **Fixed point.** The paper learns the integer and fraction width of every layer during
  training and reports averages of about 10 bits for activations and 13 bits for weights.
  This design uses those two widths for every layer, with one common binary point.
  Requantisation here is a 10-bit arithmetic shift with saturation, and batch normalisation is
  folded into an offset.
* **Zero context.** The context before the start of a sequence and the fill after its end
  are zeros. The paper does not say what it uses.
* **Coefficient loading.** Coefficients are loaded at run time through a port, not fixed at
  build time.
* **Back-pressure.** Back-pressure is supported through the whole chain: a global stall per
  instance, and valid/ready everywhere else. The paper's design assumes the output never
  stalls.
* **Not built.**
  * The variable degree of parallelism (folding a layer over 1, 5, 10 or 25 multipliers) that
    the paper uses for a low-cost FPGA on a magnetic-recording channel. Only the fully parallel
    layer exists.
  * The offline generator of the look-up table. It is replaced by the elaboration-time
    function.
  * Training.

## Resources and limits

The default top instantiates 64 × (45 + 225 + 360) = 40 320 multipliers of 10 × 13 bits. Each
tree level has FIFOs for one maximal block (18 432 samples) per split and per merge port, so
the FIFO storage grows with `L_MAX` and the number of levels. The paper fitted its HLS version onto one
large FPGA. This RTL has been compiled and simulated but not placed, so its clock rate on a
device is not established here.
