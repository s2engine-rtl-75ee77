# S2 Engine: a systolic array that skips zeros

Convolutional networks after pruning and ReLU are mostly zeros: typically
only a quarter to a third of the weights and of the activations are non-zero.
An ordinary output-stationary systolic array still multiplies every weight
with every feature. This design keeps the regular systolic structure, with
features moving right along the PE rows and weights moving down the columns,
but the data travels **compressed**. Every processing element (PE) picks out
of the two compressed streams passing through it only the pairs in which
both operands are non-zero, and multiplies just those.

Three more ideas complete the design:

* Selection is cheap and multiplication is expensive. The selection logic
  therefore runs at the full clock and the multiply-accumulate unit at a
  quarter of it (a clock enable, single clock domain). Small FIFOs between
  them absorb the mismatch.
* Adjacent PE rows convolve overlapping input rows. A column of *collective
  elements* (CEs) in front of the rows passes groups from row to row, so each
  input group is read from the feature buffers only once.
* 16-bit values are carried as two tagged 8-bit halves. This lets an
  8-bit datapath handle mixed 8/16-bit data: two 16-bit values meeting in a
  PE cost four 8-bit products.

The RTL is SystemVerilog (IEEE 1800-2017). It is synthesizable apart from
assertions and the buffers, which are plain arrays that stand in for SRAM
macros. Its default configuration is 32 x 32 PEs, PE FIFOs of depth 4, a
selection:MAC clock ratio of 4:1, and 1 MB of buffer SRAM split evenly over
32 feature buffers and 32 weight buffers.

```
             WB[0]    WB[1]   ...   WB[31]        (weights, 8192 x 15 bit each)
               |        |             |
FB[0]--CE[0]--PE(0,0)--PE(0,1)-- ... PE(0,31)      features move right
FB[1]--CE[1]--PE(1,0)--PE(1,1)-- ... PE(1,31)      weights move down
  .      ^ .     .        .             .
FB[31]-CE[31]-PE(31,0)-- ...         PE(31,31)
        (CEs pass groups upward)   results: 2 chains per column, out at the bottom
```

## The compressed stream

Data are cut into **groups** of 16 consecutive values along the channel
dimension. Inside a group only the non-zero values are kept. Each kept value
travels with its position in the group and a marker for the group's last
element:

| field   | feature bits | weight bits | meaning                                       |
|---------|--------------|-------------|-----------------------------------------------|
| value   | 8            | 8           | signed 8-bit value, or one byte of a 16-bit one |
| offset  | 4            | 4           | position 0..15 inside the group               |
| eog     | 1            | 1           | last element of its group                     |
| eok     | -            | 1           | last element of a whole kernel (weights only) |
| tag     | 1            | 1           | this element is one half of a 16-bit value    |

The types are `feat_t` (14 bits) and `wgt_t` (15 bits) in `s2_pkg`.

A group that is entirely zero still sends one element: a zero with `eog` set.
That keeps the group boundaries of the two streams in step. A 16-bit value is
sent as two elements with the same offset and `eog`, low byte first, both
tagged.

A feature group and a weight group "meet" in a PE. Their dot product is the
sum of the products of the elements whose offsets match.

## Dynamic selection: the heart of a PE

Each PE (`s2_pe`) consists of three parts: a selector (`s2_ds`), a
multiply-accumulator (`s2_mac`) and a result forwarder (`s2_rf`).

The selector puts each incoming stream through a 4-deep FIFO. It moves the
head of each FIFO into a compare register. Moving an element in is called a
*push*, and in the same clock the element is also sent on to the next PE, to
the right for features and downwards for weights. So every element visits
every PE of its row or column exactly once, in order, and the flows advance
through the array at the pace of the slowest PE they pass.

Once per clock the selector compares the two registers:

| situation                                   | action                                             |
|---------------------------------------------|----------------------------------------------------|
| offsets equal, neither at group end         | aligned pair -> WF-FIFO; push both                 |
| one offset smaller                          | push that stream only (its element has no partner) |
| one stream at group end, the other not      | push the other (its leftovers have no partner)     |
| both at group end                           | if offsets equal, emit the pair; push both         |

Exact rule (f = feature register, w = weight register):

```
consume f  if  (!f.eog && (f.offset <= w.offset || w.eog)) || (f.eog && w.eog)
consume w  if  (!w.eog && (w.offset <= f.offset || f.eog)) || (f.eog && w.eog)
pair       if  f.offset == w.offset, and both are consumed
```

A group therefore costs one clock per distinct offset present in either
stream, not 16 clocks. Take a feature group with offsets {1, 4, 9} and a
weight group with offsets {0, 4, 12}. It takes 5 decisions (0, 1, 4, 9, 12)
and yields one pair (offset 4).

The aligned pairs go into the 4-deep **WF-FIFO**. The MAC empties it at a
quarter of the rate at which the selector can fill it. When the WF-FIFO is
full, a decision that would write a pair waits. Decisions that only push
continue as long as the neighbours have room.

**Mixed precision.**
* A split value that meets an 8-bit value produces two pairs (low byte,
  then high byte).
* Two split values that meet produce four pairs, in the order
  (f_lo,w_lo) (f_lo,w_hi) (f_hi,w_lo) (f_hi,w_hi).
* For the third pair the selector keeps the weight's low byte in a spare
  register, because by then the weight stream has already moved to the high
  byte.
* Each pair carries a 2-bit part code per operand: whole, low or high byte.
* The group-end test ignores the `eog` copy carried by a low byte. The group
  ends at the high byte.

**End of a convolution.**
* The weight stream marks the last element of each kernel with `eok`.
* When that element retires at a group end, the pair written in that clock is
  marked `last`.
* If that clock has no aligned pair, a zero pair marked `last` is written
  instead. This way the MAC always learns where a convolution ends, even when
  its last group had no match.

## MAC and the rate split

`s2_mac` takes one pair per MAC enable. The enable comes from `s2_clk_div`
and is high one clock in `FREQ_RATIO` = 4.

* Operands are extended to 9-bit signed numbers. A low byte is zero-extended
  and a whole value or a high byte is sign-extended.
* One 9 x 9 signed multiplier therefore handles every combination.
* The product is shifted left by 8 bits for every high byte in the pair:
  0, 8 or 16 bits.
* Products are summed in a 32-bit accumulator.
* A `last` pair moves the sum into an output register and clears the
  accumulator. If the previous result is still waiting there, the last pair
  waits too (this is `mac_stall`).

Because the selector runs four times faster, a PE keeps up with the MAC as
long as, on average, at least one decision in four yields a pair. Sparser
data leave the MAC idle, and denser data fill the WF-FIFO and stall the
selector. Both cases appear in the end-to-end test.

## Results: two chains per column

Results leave at the bottom of the array. In each column, the even rows form
one chain (rows 0, 2, 4, ...) and the odd rows another (rows 1, 3, 5, ...).
So the array has 2 x COLS result outputs.

The results of one output position must leave a chain in row order. The RF of
a PE at place `pos` in its chain therefore:
* first passes `pos` results coming from above;
* then inserts its own result;
* then restarts its count.

Until it is its turn, the PE's own result waits in the MAC output register
(`rf_stall`).

The RF output register accepts a new word only when it is empty. A result
therefore moves one PE every two clocks. In exchange, no ready signal
ripples combinationally through the 16 RFs of a chain. This costs nothing
that matters, because a PE produces a result only every few hundred clocks.

## Overlap reuse: the CE chain

With stride 1, output row r needs input rows r .. r+K-1 and output row r+1
needs rows r+1 .. r+K. A K x K window is split into *slices*: a slice is the
K groups of one kernel column (kx) and one channel group, in ky order. The
feature stream of row r is, for every output position x, for every kx and
every channel group, the K groups `in[r+ky][x+kx][cg]`, ky = 0..K-1.

Each collective element (`s2_ce`) holds one 32-entry FIFO. It works through
each slice in K periods:

* period 0: send the next group from its own FB to the PE row;
* periods 1..K-1: send the next group from the FIFO of the CE below;
* in periods 0..K-2, also write the group it sends into its own FIFO, for the
  CE above.

The group for ky = k of row r is the group for ky = k-1 of row r+1. A group
read once from an FB therefore climbs up to K-1 rows. Only the bottom CE
(row 31) reads all K groups of every slice from its FB. All other FBs hold
only their ky = 0 groups: about 1/K of the data. The top CE keeps no copies.

With `cfg_reuse = 0` every CE simply streams its own FB. Use this for
strides other than 1, and for K = 1, where reuse does nothing anyway.

Group boundaries are found from `eog`, so the CEs work on variable-length
compressed groups. A split group of 16 values can take 32 entries, which is
why the FIFO is 32 entries deep.

## Buffers and one pass

`s2_buffer` holds one compressed stream: 8192 entries (16 KB at 16 bits per
entry).
* It is loaded through a plain write port: `fb_wr_*` / `wb_wr_*` on the top,
  with a one-hot buffer select.
* After `start` it streams entries 0..len-1 at one entry per clock, `rep`
  times. The first entry is valid two clocks after `start`.
* Feature buffers stream once. Weight buffers repeat their kernel `wb_rep`
  times, once for every output position the row computes.

A pass of the engine is:

1. Load every FB and WB with its stream.
2. Set `cfg_k`, `cfg_reuse`, `fb_len[]`, `wb_len[]` and `wb_rep`, then pulse
   `start`.
3. Take the results on `res_valid/res_ready/res_data[2c+p]`. For every output
   position x in turn, chain p of column c delivers the results of rows p,
   p+2, ... top to bottom.
4. The pass is finished when all ROWS x COLS x positions results have
   arrived. `busy` falls once all buffers have been drained.

The weight stream of column c is its kernel in the order kx, channel group,
ky. This matches the slice order of the feature streams.

Tiling a layer larger than one pass (more than 32 kernels, more than 32
output rows, or a stream that does not fit in 8192 entries), and the
compression itself, are left to the software that loads the buffers. The
testbench package `tb_s2_util` contains a reference encoder (`enc_groups`)
that shows the exact format expected.

## Top-level interface (`s2_engine`)

| port                                         | dir | width          | use                                   |
|----------------------------------------------|-----|----------------|---------------------------------------|
| clk, rst_n                                   | in  | 1              | clock, synchronous active-low reset   |
| fb_wr_en, fb_wr_addr, fb_wr_data             | in  | ROWS, 13, 14   | load port of the feature buffers      |
| wb_wr_en, wb_wr_addr, wb_wr_data             | in  | COLS, 13, 15   | load port of the weight buffers       |
| cfg_k, cfg_reuse                             | in  | 4, 1           | kernel height (1..15), reuse on/off   |
| fb_len[ROWS], wb_len[COLS], wb_rep           | in  | 14, 14, 16     | stream lengths, weight repetitions    |
| start, busy                                  | in/out | 1           | start a pass / buffers streaming      |
| res_valid, res_ready, res_data[2*COLS]       | out/in/out | 2*COLS x 32 | results                            |
| ev_sel, ev_pair, ev_mac, ev_wf_full, ev_push_block, ev_rf_stall | out | ROWS*COLS | per-PE activity, index r*COLS+c |
| ev_fb_read, ev_reuse, ev_wb_read             | out | ROWS, ROWS, COLS | buffer reads and reused elements    |

The activity outputs are one bit per unit per clock, meant for counters
(performance and energy estimates) and for the testbenches.

## Parameters

| parameter          | default | where                          |
|--------------------|---------|--------------------------------|
| ROWS, COLS         | 32, 32  | array size                     |
| F_DEP, W_DEP, WF_DEP | 4, 4, 4 | PE FIFO depths               |
| FREQ_RATIO         | 4       | selection clocks per MAC clock |
| CE_DEP             | 32      | CE FIFO (one split group)      |
| FB_DEPTH, WB_DEPTH | 8192    | buffer entries                 |
| GROUP_LEN, VAL_W, OFF_W, ACC_W | 16, 8, 4, 32 | `s2_pkg` constants   |

Changing ROWS changes the result-chain length. POS_W (5 bits) covers up to 64
rows.

## Where this RTL departs from, or adds to, the published design

* **Stream widths.** The published datapath figure gives 13-bit features,
  14-bit weights and 17-bit pairs. The mixed-precision scheme adds a tag bit
  per element, which gives 14/15 bits here. Each pair also carries two 2-bit
  part codes, which gives 21 bits.
* **First decision of the selection example.** The published text contradicts
  itself on which stream moves first when the weight offset is smaller. This
  design follows the general rule (the smaller offset moves) and the
  published timing figure.
* **Result chains.** The two chains per column and the ordering counter are
  read from the array drawing. The published text only requires results to
  leave "sequentially".
* **Buffer split.** The 1 MB total is the published figure. The even split,
  the repeat count and the load port are this design's own choices.
* **Duplicated columns.** The feature stream repeats the kx-overlap of
  neighbouring output positions: each position's window is sent in full. Only
  the overlap between rows is shared, through the CEs. This keeps the PEs
  simple, but a whole layer usually needs several passes to fit in 8192
  entries. Capacity claims made for the original design (most layers of
  AlexNet, VGG16 and ResNet50 held on chip at once) therefore do not carry
  over unchanged.
* **Not built.** The compression software, the tiling controller and the
  off-chip memory interface are not part of the RTL. Neither is anything
  after the accumulation: ReLU, requantisation and pooling.
* **Stride and padding.** These are handled only by how the streams are laid
  out. Overlap reuse assumes stride 1.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`, and each has a watchdog.

| testbench           | what it checks |
|---------------------|----------------|
| tb_s2_fifo          | random traffic against a queue model; full/empty flags and occupancy |
| tb_s2_clk_div       | the enable period of exactly 4 clocks |
| tb_s2_mac           | dot products of mixed 8/16-bit vectors split into partial pairs; one pair per enable; stall on a held result |
| tb_s2_rf            | a chain of 4 RFs delivers results in row order under random back-pressure |
| tb_s2_ds            | a two-group example: 5 decisions for the first group, 7 for both, in consecutive clocks, one aligned pair plus the zero pair closing the kernel; random sparse groups (pairs, both forwarded streams) |
| tb_s2_pe            | full convolutions through one PE against dense dot products; chain order; forwarded streams unchanged |
| tb_s2_pe_array      | 4 x 4 array with direct streams; every result in chain order |
| tb_s2_buffer        | streaming order, repeat count, one entry per clock, start latency |
| tb_s2_ce            | one CE: its K-period schedule and exactly which groups it copies; reuse on and off; several K |
| tb_s2_ce_array      | 3 rows, K = 3: each row receives its own K input rows while the FBs hold only 1/K of the data |
| tb_s2_engine        | 4 x 4 engine, random sparse layers with 16-bit values: K = 3 with and without reuse, and K = 1; every output against a direct convolution |
| tb_s2_sweep         | the two synthetic sweeps on a 4 x 4 engine: density 10..100% and 16-bit share 10..100%; every output checked, speedup trends checked |
| tb_s2_engine_full   | the engine at its default 32 x 32 size, one K = 3 layer with reuse, 32 channels, 4 positions; every output checked |

The end-to-end testbenches also count each mechanism and fail if any of them
never happened:
* selection decisions and aligned pairs;
* 16-bit values in the data;
* selection waiting on a full WF-FIFO;
* pushes blocked by a full neighbour;
* RF stalls;
* reused groups.

They also check that every FB entry is read exactly once and that the run
beats a dense array running at the MAC rate. In the 4 x 4 runs, at about 40%
density, the speedup is about 4x with K = 3. The sweep gives the following
speedups over a dense array at the MAC rate:

| density of both operands | 10%  | 30% | 50% | 70% | 100% |
|--------------------------|------|-----|-----|-----|------|
| speedup                  | 18.0 | 6.5 | 3.5 | 1.8 | 1.0  |

With dense data, each 16-bit operand doubles the pairs it takes part in.
Going from 10% to 100% 16-bit values raises the run from 2793 to 9226
clocks. An 8-bit dense array would need 2304 clocks.

To run one testbench with Verilator:

```
verilator --binary --timing --assert \
  rtl/s2_pkg.sv tb/tb_s2_util.sv rtl/*.sv tb/tb_s2_engine.sv \
  --top-module tb_s2_engine -Mdir obj -o sim && obj/sim
```

The full-size testbench builds in about a minute and simulates in seconds.
