# CARLA convolution accelerator: SystemVerilog implementation

CARLA computes the convolutional layers of a CNN with 196 multipliers that
share a single stream of operands. There are 65 convolution units (CUs):
CUs #0..#63 each have three processing elements (PEs), and CU #64 has four.
The 65 CUs hang off one shift register of 65 stages. Each clock, one 16-bit
word enters the shift register from DRAM and moves one CU further per clock.
Every PE in a CU multiplies that passing word by a value held in its own
register.

What sits in the registers and what flows through the pipe depends on the
filter size:

* **3x3 filters.** The registers hold filter weights and the in-fmap rows flow
  through the pipe.
* **1x1 filters.** Either the in-fmap features sit in the registers and the
  weights flow, or the reverse for small maps.

Each multiplier gets a useful operand almost every clock. Each DRAM word
fetched is used by all 64 or 65 CUs. Rows that two consecutive filter rows
both need are replayed from a delay chain behind the pipe instead of being
fetched twice.

This repository holds synthesizable RTL for the whole accelerator at the
published size: U = 64, N = 3, 16-bit words, 24-bit accumulators and
224-word SRAM banks. It also holds testbenches that run real ResNet-50 and
VGG-16 layer shapes end to end against a reference convolution.

## Blocks

| File | Block | Contents |
|---|---|---|
| `rtl/carla_pkg.sv` | shared types | word widths, mode and source encodings, the control tag, the layer record, DRAM port structs |
| `rtl/carla_pe.sv` | processing element | register R, multiplier, zero mux M, operand mux A, adder, accumulator ACC |
| `rtl/carla_sram.sv` | SRAM bank | one write port, one synchronous read port |
| `rtl/carla_cu.sv` | convolution unit | NPE PEs, one S (24-bit) and one P (16-bit) bank per PE, write muxes B, tag decoding |
| `rtl/carla_input_pipe.sv` | input pipeline | PR0..PR64, the 19/84/14/16/26-register feedback chain, PR0 source mux, tag pipeline |
| `rtl/carla_ctrl.sv` | controller | element generator for the three dataflows, CU load sequencer, DRAM read buses, P-SRAM read-out to DRAM |
| `rtl/carla_top.sv` | accelerator | the above wired as one design: 65 CUs, pipe, controller |

### Banks and buses

Each PE owns two banks:

* **S** holds partial sums at 24 bits.
* **P** receives finished outputs, narrowed to 16 bits by saturation.

The two banks form a double buffer. While the next block of outputs is being
accumulated in S, the previous one drains from P to DRAM.

There are four 16-bit DRAM read buses (64 bits per clock):

* Input #0 feeds the pipe.
* Inputs #1..#3 reach register R0..R2 of every CU. Only one CU is loaded per
  clock.

The last CU's fourth register takes Input #0.

## The three dataflows

### 3x3: serial accumulation along a row

A CU computes one output channel. Its three registers hold one row j of the
3x3 filter for the current input channel. An input row streams through the
pipe one feature per clock, and each output takes three clocks:

1. PE #0 starts output `(r, n)` with `x(n-1)·w0`. It adds either the partial
   sum read from S (previous filter row or channel) or zero (first
   contribution).
2. One clock later PE #1 adds `x(n)·w1`.
3. One more clock later PE #2 adds `x(n+1)·w2` and writes the sum back to S,
   or to P when it was the last contribution.

So CU #n turns out one output per clock, n clocks behind CU #0.

At the ends of a row the left or right neighbour is zero padding. Muxes M0 and
M2 replace the product with zero there. No padding words are ever streamed.

A **pass** is one filter row j of one input channel. It streams every input
row that row j touches for the current block of output rows. The controller's
loop order is:

* filter group (64 filters, one per CU)
* block of `rows` output rows
* input channel
* filter row j
* input row
* column

The three banks of a CU act as one store of 3·224 = 672 words in this mode. PE
#2 may write any of them (muxes B0/B1), so a block of output rows may hold up
to 672 outputs. Examples:

* 4 rows of 56 (ResNet Conv2)
* 14 rows of 14 (Conv4)
* 2 rows of 224 (VGG-16)

CU #64 does no writing in this mode.

Weight loading overlaps computation. At the start of each pass, CU #n receives
its three weights of row j n clocks after the pass's first element reaches
PR0, three words in one clock on Inputs #1..#3. It gets them exactly when the
pass's first element arrives at CU #n. A pass shorter than 64 elements would
make these loads collide with the next pass's, so such a pass is padded with
zero rows that write nothing. This only happens for maps narrower than about
22 columns with few rows, such as ResNet Conv5's 7x7 maps.

Computation clocks per filter group: `(3·OL² − 2·OL)·IC`. Each output row
needs three passes, and the padding rows above the first and below the last
row are skipped.

### 1x1: features stationary, weights streaming

Each of the 196 PEs holds one in-fmap feature of input channel c, which is
one output position. The 64 weights of channel c for the current filter group
stream through the pipe one per clock, and every weight passes every CU. A PE
multiplies its feature by each weight k as it goes by.

Loading happens step by step. At step s (s = 0..63), weight s enters PR0 and
CU #s is loaded with its three features of channel c. Weight 0 of the channel
reaches CU #s exactly s clocks later, so each CU gets its new features just as
they are first needed. The previous channel's last weight has passed that CU
by then.

A 65th step, the **stall**, sends a bubble into the pipe. It uses all four
read buses to load the four features of CU #64, which no weight step could
load.

Every PE accumulates its output for filter k at S address k. One channel takes
U+1 = 65 clocks. Clocks per layer: `65 · IC · ⌈OL²/196⌉ · ⌈K/64⌉`.

### 1x1 on small maps: weights stationary, features streaming

When the out-fmap has at most 224 positions (ResNet Conv5, 7x7), each PE of
CUs #0..#63 holds one weight, so a group of 192 filters is in place at once.
The channel's features stream through the pipe. A channel lasts max(OL², 64)
clocks, padded with bubbles to 64 so the next channel's weights can be loaded
one CU per clock behind the stream. S address = output position.

Clocks: `max(OL², 64) · IC · ⌈K/192⌉`.

### Stride 2 for 1x1 layers

A stride-2 1x1 layer is handled by fetching only the features under the
`OL = ⌈IL/2⌉` output positions: every second row and column. After the fetch
it runs as a stride-1 layer of size OL, in either 1x1 dataflow. The transition
layers of the original ResNet-50 are of this kind.

## Row reuse through the feedback chain

Consecutive passes of one channel share input rows. Filter row j = 0 for
output rows 4..7 reads input rows 3..6, and row j = 1 reads 4..7. The second
pass could take rows 4..6 from the first pass instead of DRAM.

After leaving PR64, every word enters a chain of 19, 84, 14, 16 and 26
registers. The PR0 mux can take the word back from the end of the pipe or
from the end of any segment, which re-enters it **65, 84, 168, 182, 198 or
224** clocks after it first entered.

For a row to be replayed, the distance between its two uses must equal one of
these delays. That distance is the previous pass length plus the shift in
start row times the row width. In steady state it is `(rows − 1)·W`, with
`rows` the output rows per block, and the chain's delays match the common
layer shapes:

| Layer | Shape | Distance | Tap |
|---|---|---|---|
| ResNet Conv2 | W = 56, 4 rows | 3·56 = 168 | tap 2 |
| ResNet Conv3 | W = 28, 4 rows | 3·28 = 84 | tap 1 |
| ResNet Conv4 | W = 14, 14 rows | 13·14 = 182 | tap 3 |
| VGG | W = 224, 2 rows, or W = 112, 3 rows | 224 | tap 5 |

The controller computes the distance for each row. It uses the matching tap
when there is one, and otherwise fetches the row again. Only the in-fmap
stream uses the chain.

With reuse, in-fmap reads per filter group are `(IL + 2·P − 2)·IL·IC` for P
blocks of output rows: each input row is fetched once per block, plus the
rows at block boundaries. The Conv2 example meets this exactly.

## Control tags

The CUs contain no sequencer. Every word the controller puts into PR0 carries
a 15-bit tag that moves with it through the pipe:

* `zero_m0`, `zero_m2`: the M0/M2 zero substitutions.
* `addr`: the SRAM address of the output this word contributes to.
* `first`: add zero rather than S.
* `last`: write to P, not S.
* `out_valid`: the address is a real output. It is low for bubbles and
  padding.

Because the SRAM read for a word must start one clock before the word reaches
the PE, each CU also sees `tag_nxt`, the tag entering its stage next clock. In
the 3x3 dataflow the tag on a word describes the output that word *starts* at
PE #0. That is the output centred on the *next* word, so the controller
generates elements with one element of lookahead.

DRAM reads have one clock of latency, so every control output of the
controller (PR0 source, tag, CU load strobe) is registered to meet its data.

## Result read-out and the hold

Finished outputs are written only during the last input channel of a block.
After the block's last element leaves the pipe, the controller reads all P
banks out, one word per clock, onto the single DRAM write port. Meanwhile the
next block accumulates in S.

If the next block reaches its last channel while the read-out is still
running, the controller holds: it sends bubbles until the read-out ends, so
that P is not overwritten.

With few input channels this write-back dominates:

* ResNet-50 Conv2 1x1 (56x56x64, 256 filters) takes 815617 clocks against the
  266240 of computation.
* The 3x3 layers with 64+ channels are barely affected.
* On 7x7 maps the padding of short passes costs more. ResNet-50 Conv5 3x3
  needs 107520 clocks per filter group (three passes padded to 70) instead of
  the 68096 of full utilisation.

The read bandwidth was specified as 64 bits per clock. The write path was
not, and one word per clock is this design's choice. A wider write port would
remove most of the hold.

## Interface and memory layout

`carla_top` ports:

* `clk`, `rst_n`: asynchronous active-low reset.
* `start`, `busy`, `done`: pulse start with `cfg` valid; `done` pulses once at
  the end.
* `cfg` (`layer_cfg_t`): `mode`, `il` (in-fmap side), `ic`, `k`, `rows` (3x3
  output rows per block), `s2` (stride 2, 1x1 only), `in_base`, `w_base`,
  `out_base`.
* `rd_req[4]`, `rd_data`: read request on bus b; the data is expected on
  `rd_data[b]` the next clock.
* `wr`: one output word per clock.

DRAM is word-addressed, 16-bit words, square maps, channel-major:

* in-fmap `x_c(r, col)` at `in_base + (c·IL + r)·IL + col`
* weights `w_c^k(j, i)` at `w_base + ((k·IC + c)·FL + j)·FL + i` (FL = 3 or 1)
* out-fmap `y_k(r, col)` at `out_base + (k·OL + r)·OL + col`

Limits of the field widths: IL ≤ 255, IC and K ≤ 4095. `rows·IL` must be at
most 672, and rows ≥ 2 in 3x3 mode.

## Where this design departs from or goes beyond the published description

Not implemented:

* **7x7 filters.** The split of each 7x7 filter plane into 21 one-row pieces
  run through the 3x3 datapath is not implemented. Neither is stride 2 for 3x3
  filters. The published description gives the split but not the schedule,
  nor how pieces whose columns fall outside the map are zeroed when only PE #0
  and PE #2 have zero muxes. ResNet-50 Conv1 therefore cannot run.
* **Bias** is not added. Zero padding is 1 for 3x3, 0 for 1x1.

Choices made in this design:

* **Narrowing** from 24 to 16 bits saturates. There is no scaling or rounding.
  The 32-bit product is added modulo 2^24.
* **SRAM organisation.** The banks are taken as 224 words each (3 S/P pairs
  per CU), which is what the 3x3 example with 4×56 = 224 outputs per CU
  spread over three banks needs. That is 196·224·(24+16) bits ≈ 214 KB. The
  published total on-chip SRAM is 85.5 KB, so the original evidently
  organised the storage more tightly than described.
* **1x1 channel timing.** One drawing of the 1x1 timing shows weight 63
  twice. The design follows the stated rule instead: 64 weight clocks and one
  stall clock per channel. The stall is a bubble, not a pipeline freeze. Only
  with the pipe moving can the last CU be reloaded at the right moment.
* **Feedback chain taps.** The segment lengths come from the architecture
  drawing. The tap positions (one at the end of the pipe and one after each
  segment) are this design's reading of it.
* **Control.** The tag encoding, the lookahead, the automatic tap choice,
  zero-row padding of short passes, the hold, and the DRAM protocol and
  layout are this design's.

## Verification

Every block has a self-checking testbench in `tb/`:

| Testbench | Checks |
|---|---|
| `tb_carla_pe` | PE against an arithmetic model, all mux settings |
| `tb_carla_sram` | random reads/writes against an array, read-during-write |
| `tb_carla_input_pipe` | pipe and all six feedback delays against a queue model |
| `tb_carla_cu` | serial 3x3 accumulation across bank boundaries; 1x1 with the stall; saturation; 40 random trials |
| `tb_carla_ctrl` | controller at U = 4 with a model of the CUs: outputs, clock counts, read counts |
| `tb_carla_top` | whole design at default size: seven layers covering all three dataflows, stride 2, zero-row padding, feedback, hold; counts each mechanism and fails any that never occurred |
| `tb_carla_workloads` | whole design at default size on full layer shapes (below) |

Layers run by `tb_carla_workloads`:

| Layer | Shape | Clocks |
|---|---|---|
| ResNet-50 Conv2 3x3 | 56x56x64, 64 filters | 609353 |
| ResNet-50 Conv4 3x3 | 14x14x256, 256 filters | 586057 |
| ResNet-50 Conv2 1x1 | 56x56x64, 256 filters | 815617 |
| ResNet-50 layer #11, 1x1 stride 2 | 56x56x256 → 28x28, 128 filters | 145737 |
| ResNet-50 Conv5 1x1 | 7x7x512, 2048 filters | 369929 |
| VGG-16 layer 1 | 224x224x3, 16 of 64 filters | 963090 |
| ResNet-50 Conv5 3x3 | 7x7x512, 64 of 512 filters | 110729 |

On all of them every output matches a direct convolution. The clock counts
of element generation and the DRAM read counts equal the formulas above. The
test takes about a minute.

To simulate with Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv -Irtl \
          --top-module tb_carla_top -o sim rtl/carla_pkg.sv tb/tb_carla_top.sv
obj_dir/sim
```

Each testbench ends by printing `TB_RESULT checks=<n> failures=<m>`.
Replace `tb_carla_top` by any other testbench name. The sizes are
parameters of `carla_top` (`U`, `NPE`, `DEPTH`, `SEG0..SEG4`). The
controller testbench shows how a reduced configuration (U = 4, 8-word banks)
is set up.

Remaining tool warnings are two kinds, both understood:

* Unused bits of wide address sums.
* `SYNCASYNCNET` for the reset used both asynchronously and in the
  `disable iff` of the controller's assertion.
