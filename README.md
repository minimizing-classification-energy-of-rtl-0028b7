# A scalable inference engine for binarized neural networks

In a binarized neural network (BNN) every weight and every activation is
either +1 or -1, which is stored as a single bit: 1 for +1, 0 for -1. A dot
product of two such vectors becomes a bit-wise XNOR (1 where the signs agree)
followed by a population count. A memory word of M bits then carries M
weights, and one XNOR/popcount over a word does M multiply-accumulates. This
engine is built around that fact. It has N identical processing engines
(PEs) that share three M-bit wide memories. **M (memory width) and N (number
of PEs) are the two parameters** you trade against each other for energy and
latency. The defaults are M = 128 and N = 8.

The RTL implements the architecture of Hosseini et al., "Minimizing
Classification Energy of Binarized Neural Network Inference for Wearable
Devices" (ISQED 2019). That paper describes the datapath in some detail and
the control only by its role. The memory layout, layer programming, control
schedule and host interface described below are this design's own choices.
The paper's authors did not write or review this RTL.

The engine targets small physiological time-series classifiers: 1-D
convolutions with 1xK filters over multichannel frames, max-pooling,
and dense layers. The two reference networks are a stress-detection ConvNet
(a 64x7 input frame, seven layers) and an activity-monitoring MLP (40 inputs,
four layers).

## What one layer computes

Every layer computes, for each output channel `o` and output position `p`, an
accumulation over the patch that feeds that output. It then takes the sign:
`y = 1` (meaning +1) if the sum is >= 0, otherwise `y = 0`. The patch of a 1xK
convolution is K consecutive time steps of all input channels. A dense layer
is the same thing with one position whose patch is the whole input.

The PE handles three kinds of layer. The kind is set per layer by `mode`. The
encoding 0/1/2 is the select value of the PE multiplexers.

| mode | data | weights | per step the accumulator does |
|---|---|---|---|
| `MODE_FIRST` (0) | 16-bit signed samples | 1 bit | `+sample` if the weight bit is 1, else `-sample` |
| `MODE_MID` (1) | 1 bit | 1 bit | `+popcount(xnor(data, weights) & mask)` over a whole M-bit word |
| `MODE_LAST` (2) | 1 bit | 16-bit signed | `+weight` if the data bit is 1, else `-weight` |

A mid layer counts the *agreements* P. It does not count the +/-1 sum, which
is `2P - B` for a patch of B bits (taps x channels). The engine therefore starts every accumulation
at a per-layer value `acc_init`. For a plain mid layer, set
`acc_init = -ceil(B/2)`: the accumulator is then `>= 0` exactly when the
+/-1 sum is `>= 0`. The same start value is where a layer-wide bias or
threshold can be folded in. For first and last layers, `acc_init` is usually 0.

**Max-pool** comes after the sign. On 0/1 values the maximum is a plain OR,
so a 1x2 max-pool is the OR of two neighbouring output bits.

**Final layer.** A layer marked `final_layer` writes no feature map. Each
output channel's full accumulator is kept as a 32-bit class score, and the
host picks the label (for example the largest score). For a final mid layer
the score is `P - ceil(B/2)`. That is half the +/-1 sum, which is enough to
rank the classes.

## Architecture

```
                 host: filter words, input frame, layer table, start
                              |
   +--------------+    +---------------+    +-------------------+
   | filter memory|    | input memory  |<-->| feature-map memory|   (M-bit words)
   +------+-------+    +-------+-------+    +---------+---------+
          |  one word/cycle    |  same word to all PEs |  N-bit packets, bit-masked
          v                    v                       ^
   +----------------------------------------------------------+
   | PE 0 .. PE N-1  (output channel g*N + l on PE l)          |
   |  filter cache -> XNOR -> reg -> PCNT -> mux -> +/- -> acc |
   |  sign bit -> output cache -> OR (max-pool) / bypass ------+
   +----------------------------------------------------------+
          ^ addresses, step flags, layer mode
   +------+---------------------------------------------------+
   | global controller: layer table, filter load, patch        |
   | streaming, output draining, pool-skip jumps, scores       |
   +-----------------------------------------------------------+
```

| file | block |
|---|---|
| `rtl/bnn_pkg.sv` | shared constants, `layer_mode_e`, the layer descriptor `layer_desc_t` |
| `rtl/bnn_top.sv` | the engine: three memories, controller, N PEs, host ports |
| `rtl/bnn_global_ctrl.sv` | global address and data-flow controller, layer table, score registers |
| `rtl/bnn_pe.sv` | one processing engine |
| `rtl/bnn_popcount.sv` | M-bit population count |
| `rtl/bnn_filter_cache.sv` | per-PE filter store |
| `rtl/bnn_output_cache.sv` | per-PE output-bit store, max-pool OR and bypass |
| `rtl/bnn_sram.sv` | M-bit memory with per-bit write mask (used for all three shared memories) |

**Output-channel tiling.** The N PEs always work on N different output
channels of the same layer, at the same position and the same step. So one
data word read from the shared memory feeds all N PEs. Each PE reads its own
filter word from its filter cache. The filter is copied there once per
channel group, so the shared filter memory is not read again for every
position.

**Ping-pong data memories.** Even-numbered layers (0, 2, ...) read the input
memory and write the feature-map memory. Odd-numbered layers do the opposite.
The host loads the input frame into the input memory.

### The PE pipeline

One step enters each PE per cycle. A step's result is in the accumulator
three cycles after the controller issues it:

1. **Issue (S0).** The controller puts out the data address, the filter-cache
   index and the step flags (`first`, `last`, `dload`, `fload`). The shared
   memory and the filter cache both answer one cycle later.
2. **Operand (S1).**
   - Mid mode: the XNOR of the data word and the filter word, ANDed with the
     layer's valid-bit mask, goes into a register.
   - First mode: two shifters pick one sample and one filter bit. The data
     word (8 samples of 16 bits at M = 128) shifts 16 bits per step. The
     packed filter word shifts 1 bit per step. A new word is loaded when
     `dload`/`fload` says so.
   - Last mode: the same, with the roles swapped. The filter word holds
     16-bit weights and the data word is shifted 1 bit per step.
3. **Accumulate (S2).** The adder input is the popcount (mid mode) or the
   sample or weight (first/last mode). It is added or subtracted according to
   the bit chosen by the add/sub multiplexer. The accumulator starts from
   `acc_init` on the first step of a patch. On the last step the sign bit is
   written into the output cache, at slot `position mod 16`.

The accumulator is M bits wide.

**Throughput per PE and cycle:**
- mid layers: one M-bit XNOR and popcount, which is 2M binary operations;
- first and last layers: one 16-bit add/subtract.

Speed therefore grows with f x M x N (clock, width, PEs) for binary layers,
but only with f x N for the full-precision first and last layers.

## Memory layout and the layer table

This section is what you need to program the engine. The testbench
`tb/tb_bnn_top.sv` (task `run_net`) does all of it and is a working example.

Let E = M/16 (16-bit elements per word), W = words per time step and S the
convolution stride in time steps (1 for dense layers).

**Input frame (first layer).** Time step t with C channels takes
`W = ceil(C/E)` words, starting at word `t*W`. Channel c is element `c mod E`
(bits `16*(c mod E)+15 : 16*(c mod E)`) of word `t*W + c/E`. Unused elements
must be 0.

**Binary feature maps.** Time step t with C channels takes `W = ceil(C/M)`
words, starting at word `t*W`. Channel c is bit `c mod M` of word `t*W + c/M`.
Use C <= M or C a multiple of M: the valid-bit mask is the same for every
word. The engine writes its outputs in exactly this layout, so the next layer
can read them.

**Filters.** Filter o of a layer occupies `filt_words` consecutive words at
`filt_base + o*filt_words`. Inside a filter, the weight for tap k and channel c
sits at the same place the patch puts the matching input:

| mode | `n_steps` | `pos_stride` | `filt_words` | weight (k, c) lives at |
|---|---|---|---|---|
| first | `K*W*E` | `S*W` | `ceil(n_steps/M)` | bit `(k*W*E + c) mod M` of word `(k*W*E + c)/M` |
| mid | `K*W` | `S*W` | `n_steps` | bit `c mod M` of word `k*W + c/M` |
| last | `K*W*M` | `S*W` | `n_steps/E` | 16-bit element `(e mod E)` of word `e/E`, where `e = k*W*M + c` |

Filter slots that match padding (unused elements or bits) must hold 0 for
first and last layers. In mid layers the mask handles them: set `in_bits = C`
when C < M, otherwise 0.

**Layer descriptor** (`layer_desc_t`, 16-bit fields):
- `mode`, `maxpool`, `final_layer`;
- `n_pos`: output positions before pooling. For a convolution with stride S
  over T steps this is `(T-K)/S+1`; for a dense layer it is 1. It must be even when
  pooling;
- `n_steps`, `pos_stride`, `filt_words`: from the table above;
- `n_cout`: number of output channels;
- `filt_base`, `in_bits`, `acc_init`.

The table has 8 entries. Write them with `cfg_we`/`cfg_addr`/`cfg_desc` while
the engine is idle.

The patch of position p is read from data words
`p*pos_stride + (step's word)`. Setting `pos_stride = S*W` gives a
convolution with stride S. Convolutions are *not* zero-padded: at stride 1 a
layer with K taps over T steps gives `T-K+1` positions. A dense layer over a
feature map of T steps is a convolution with K = T and one position.

## Schedule and timing

For each layer, the controller runs the following for each group of N output
channels:

1. **Filter load.** One filter-memory word per cycle is copied into the
   caches of the active PEs (`active x filt_words` cycles), plus one cycle
   for the last write.
2. **Batches** of up to 16 positions (the output-cache depth):
   1. stream `positions x n_steps` steps, one per cycle;
   2. wait 4 cycles for the pipeline to empty;
   3. drain: one cycle per output (per pooled output with max-pool). All PEs
      put out their bit of the same output, and the controller writes these N
      bits as one packet with a bit mask. Output q of the group goes to
      word `q*ceil(n_cout/M) + g*N/M`, bits starting at `(g*N) mod M`. This is
      why N must divide M. A final layer has no drain; it takes one cycle.

Each layer adds one more cycle to fetch its descriptor.

The whole run, without pool skips:

```
cycles = sum over layers [ 1 + sum over groups ( active*filt_words + 1
         + sum over batches ( positions*n_steps + 4 + drain ) ) ]
```

`tb_bnn_top` checks this formula cycle-exactly on the activity network.

| network, default M=128, N=8 | cycles here | latency at 128 MHz | paper's ASIC figure (8 PEs, 128 bit, 128 MHz) |
|---|---|---|---|
| activity MLP | 3,316 | 25.9 us | 14 us |
| stress ConvNet (unpadded) | 45,638 | 357 us | 290 us |

This schedule is slower than the paper's implementation. Filter loads and
output drains are not overlapped with computing, and the first layer
processes one sample per cycle.

## Pool skipping

With max-pool, a pool's result is 1 as soon as any one of its positions is 1.
The remaining positions of that pool can be skipped.

**In a PE.** When a position of a pooled layer finishes with +1, the PE
records that pool as *decided* (`pd_valid`, `pd_id`). Every later step of a
decided pool is dropped, both at S1 and at S2: it is not accumulated and
nothing is written. The skipped position's cache slot keeps a stale bit. That
is harmless, because it is only ever ORed with the 1 that decided the pool.

**In the controller.** All PEs share one data stream, so the controller can
jump ahead only when *every* active PE has decided the current pool. It then
moves to the first position of the next pool and counts the jump in
`pool_skips`.

The decision reaches the controller three cycles after the deciding step. A
few steps of the next position are therefore issued before the PEs drop them.
The jump costs no cycle: in the cycle the jump is taken, the first step of
the next pool is already issued. The saving is therefore exactly the steps
of the pool that were not issued.

**What it buys here.** On the default engine the stress network drops 1.3% of
all PE steps and makes 1 controller jump. With M = 32 and N = 2 it drops
2.4% and makes 297 jumps, which cuts the run from 212,067 to 207,577 cycles
(2.1%). The paper reports a
22% reduction in operations for its stress network, counted in its own
operation units. In this design the count is dominated by the first layer,
which handles one sample per step and has no pooling. Requiring all N PEs to
agree before jumping also makes time savings rare when N is large.

## Host interface (`bnn_top`)

All signals are synchronous to `clk`. `rst_n` is an asynchronous,
active-low reset of the control state. Memory contents are not reset.

1. While `busy` is low, write the filter memory
   (`host_fw_we/addr/data`, full words), the input memory
   (`host_in_we/addr/data`) and the layer table (`cfg_we/addr/desc`).
2. Set `n_layers` and pulse `start` for one cycle.
3. `busy` stays high until the last layer ends. Then `done` rises and stays
   high until the next `start`.
4. `scores[i]` holds the final layer's accumulator for class i (up to 16).
   `cycles` is the length of the run and `pool_skips` the number of
   controller jumps.

The controller asserts that `start` does not arrive while busy, that no
layer has zero steps, and that no filter is longer than the filter cache.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `M` | 128 | memory width = word width of the datapath (power of two, >= 16) |
| `N` | 8 | number of PEs (must divide M) |
| `FILT_DEPTH` | 2048 | filter-memory words |
| `DATA_DEPTH` | 256 | words in each of the input and feature-map memories |
| `FC_DEPTH` | 64 | filter-cache words per PE (longest filter) |
| `OC_DEPTH` | 16 | output-cache bits per PE = positions per batch |
| `POOL` | 2 | max-pool size |
| `MAX_LAYERS` | 8 | layer-table entries |
| `N_SCORES` | 16 | class-score registers |

M = 128 and N = 8 are configurations the paper evaluates. The depths are this
design's own sizing: both reference models fit with room to spare. The stress
model takes 1,344 and the activity model 1,312 of the 2,048 filter words.

At a narrower M the same model needs proportionally more words. At M = 32
the two models take 2,976 and 4,736 words, so raise `FILT_DEPTH` too. At
M = 16 the M-bit accumulator can overflow on sums of 16-bit first-layer
samples.

## Verification

Every testbench checks its outputs against values it computes itself, and
prints `TB_RESULT checks=... failures=...`.

| testbench | what it checks |
|---|---|
| `tb_bnn_popcount` | counts of all-zero, all-one, one-hot and random 128-bit words |
| `tb_bnn_sram` | full and bit-masked writes against a reference array, 1-cycle read latency |
| `tb_bnn_filter_cache` | random read-back, latency, read-during-write returns old data |
| `tb_bnn_output_cache` | bypass read of every slot, OR-pooled read, stale slot masked by a written 1 |
| `tb_bnn_pe` | mid/first/last accumulations against sums computed in the testbench, sign bits, 3-cycle latency, pool skipping (a decided pool's next position yields no result, also with 16 positions issued back to back) |
| `tb_bnn_global_ctrl` | every filter, data and write address, step flags, memory swap, packet data/masks, skip jumps (and that they cost no cycle) and scores, for a 3-layer program with stand-in PEs |
| `tb_bnn_top` | default engine; both reference networks and a small network with stride-2 convolutions, with hashed pseudo-random weights and inputs; every class score against a reference model of the network arithmetic; cycle count; that every mechanism occurred |
| `tb_bnn_top_narrow` | the same at M = 32, N = 2 |

To run one with Verilator:

```
verilator --binary --timing --assert -Irtl -y rtl \
    rtl/bnn_pkg.sv tb/tb_bnn_top.sv --top-module tb_bnn_top -o sim
./obj_dir/sim
```

Both full-network runs take well under a second.

## Where this design departs from, or adds to, the source

- **Padding.** Convolutions are computed without padding. The parameter count
  the paper gives for its stress network (98K) implies same-size
  convolutions. The reference ConvNet here therefore has shorter feature maps
  (60, 28, 24, 10, 3) than the paper's.
- **Layer programming.** The descriptor table, the memory layout, the
  valid-bit mask of mid layers and the `acc_init` start value are this
  design's own. The source says only that a controller handles Conv and FC
  layers with different strides, and that the bias is "implicitly included".
- **Pool skipping.** The controller jumps only when all PEs agree (see above).
- **Sizes.** The sizes of the caches, memories and layer table are
  assumptions. The 16-bit first-layer sample width is also assumed (the
  source gives 16 bits for last-layer weights only).
- **PCNT width.** The popcount result is `log2(M)+1` bits wide, one bit more
  than the width drawn in the source, so that a full word can be counted.
- **Label output.** Class scores are kept in registers and the label is left
  to the host. The source does not say how the label leaves the chip.
- **Memories.** All memories are plain synchronous arrays. For an ASIC they
  would be replaced by compiled SRAM macros with a per-bit write mask, and
  for an FPGA by block RAMs.
