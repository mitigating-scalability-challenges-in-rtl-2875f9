# LUT-MU: a pruned, LUT-based approximate matrix-multiply layer

A LUT-based approximate matrix multiplier replaces the multiply-accumulate
work of a neural-network layer with table look-ups. The algorithm underneath
is MADDNESS, a form of product quantisation. Each input vector is cut into
`C` sub-vectors, called codebooks. A small binary decision tree, learned
offline, maps each sub-vector to one of `G = 2^I` prototypes. The dot product
of every prototype with every weight column is precomputed offline and stored
in a table. At inference time the multiplier needs no multiplications:
encode `C` sub-vectors, fetch `C` table entries per output, add them up.

Used naively, that scheme scales badly. The tables grow with the problem
size, and most of what one layer computes and sends to the next is never
used. The next layer's decision trees only look at `I` values, its *split
dimensions*, out of every sub-vector. The LUT-MU (LUT-based matrix
multiplication unit) described here uses that fact in three ways:

* **Data pruning.** A layer sends only the values the next layer's trees
  compare. That is `I x C` values per vector, whatever the vector's full
  width.
* **Data reshape.** Those values are grouped into `I` *clusters* of `C`
  *blocks*. Cluster `i` holds the value the `i`-th tree level needs, for every
  codebook.
* **Parameter pruning.** A layer keeps tables only for the outputs that the
  next layer actually compares. That is `O = I_next x C_next` tables,
  not `D_out`.

This RTL is a synthesizable, parameterised SystemVerilog version of the
LUT-MU hardware, followed by the successive-thresholding activation that
closes a layer. The defaults are the main evaluated configuration. It is the
second layer of a 4-layer MNIST MLP (a 256 x 256 matrix) with LUT shape
`(C_in, 2^I_in, C_out*I_out) = (32, 16, 64)` and partition factors
`(S, E) = (8, 1)`. That configuration accepts a new vector every 8 cycles.

## Data format

All activations are `W`-bit unsigned numbers (default `W = 4`). An input
package is `I*C*W` bits wide. Block (cluster `i`, codebook `c`) is the value
of split dimension `i` of codebook `c`, at bits `[(i*C + c)*W +: W]`.

Output element `o` of a layer is defined offline. With `o = i'*C_next + c'`
it is the `i'`-th split-dimension value of codebook `c'` of the next layer.
The output package therefore has exactly the format of the next layer's
input, and units chain directly: `out_data` of one feeds `in_data` of the
next.

## Datapath

```
in_data (I*C*W) ─► allocator ─► C/S encoders ─► ID buffer ─► aggregator ─► thresholding ─► reshape ─► out_data (O*W)
                   root reg     (parallel        (C IDs)     ROM group      2^W-1 thr.      E slides
                   C/S leaves    decision trees)              O/E adder      per output      -> one
                   S:1 muxes                                  trees          package
```

| module | role |
|---|---|
| `lutmu_top` | one computation unit (layer): LUT-MU, thresholding, reshape |
| `lutmu_core` | the LUT-MU: allocator, encoders, ID buffer, aggregator |
| `lutmu_allocator` | register tree and multiplexers. In `S` rounds, encoder `k` gets codebook `k*S+s` |
| `lutmu_encoder` | decision-tree encoder, all tree nodes compared at once |
| `lutmu_aggregator` | sequencer over `(e, s)`, ROM group, adder trees, biases |
| `lutmu_rom_group` | the LUTs split over `O*C/(S*E)` ROMs |
| `lutmu_dp_rom` | one ROM: synchronous read port and a fill port |
| `lutmu_adder_tree` | `C/S`-input adder tree plus round accumulator |
| `lutmu_threshold` | successive thresholding, 4W-bit sum to W-bit activation |
| `lutmu_out_pack` | assembles the `E` slides into the next layer's package |
| `lutmu_pkg` | parameter-load bus type and address map |

### Parameters

| name | meaning | default |
|---|---|---|
| `C` | input codebooks `C_i` | 32 |
| `I` | tree depth = split dimensions per codebook `I_i`; `2^I` prototypes | 4 |
| `O` | retained outputs `I_{i+1} x C_{i+1}` | 64 |
| `S` | partition factor: codebooks per encoder, rounds per vector | 8 |
| `E` | partition factor: slides per vector, outputs per adder tree | 1 |
| `W` | activation width. LUT entries are `2W` bits, sums `4W` bits | 4 |

Constraints: `S` divides `C`, and `E` divides `O`.

## The encoder: a decision tree without a dependency chain

MADDNESS encodes a sub-vector by walking its tree. At level `l` it compares
block `l` with the split value of the current node, and the next ID is
`ID*2 + (block > split)`. Walked level by level, each comparison waits for
the previous one.

`lutmu_encoder` instead compares every node at once. Level `l` has `2^l`
comparators, all fed by block `l`. For each of the `2^I` leaves, an AND gate
checks that every comparator on the path to that leaf agrees with the leaf's
ID bits. Exactly one AND gate fires, and this is asserted in simulation. A
`2^I`-to-`I` encoder then turns it into the ID. Split values are stored in
heap order: node (level `l`, path prefix `p`) is at index `2^l - 1 + p`. Each
encoder keeps `S` sets of split values, one per codebook it serves, and the
round number `s` selects the set.

## The aggregator: turning scattered look-ups into parallel reads

Output `o` is `bias[o] + sum_c LUT_o[c][ID_c]`. Each column `c` of each table
contributes exactly one entry, so the columns can live in separate memories
and be read in parallel. The LUTs are cut into `(O/E) x (C/S)` ROMs of
`S*E` columns each:

```
ROM (j, k) holds LUT_o[c][g] for  o = e*(O/E) + j,  c = k*S + s
           at address (e*S + s)*2^I + g          (e < E, s < S, g < 2^I)
```

The aggregator steps the two selection signals, the slide `e` (outer loop)
and the codebook `s` (inner loop), one pair per cycle. In cycle `(e, s)`,
ROM `(j, k)` is read at the ID of codebook `k*S + s`, which encoder `k`
produced in round `s`. Adder tree `j` adds the `C/S` values it gets. Its
accumulator register adds up the `S` rounds, starting from the bias. After
round `S-1`, the `O/E` sums of slide `e` leave as one package.

One vector thus holds the ROMs for `S*E` cycles. Larger `S` and `E` mean fewer
encoders, fewer adder trees and deeper, fuller ROMs, at the price of a
longer initiation interval. `(S, E) = (8, 1)` gives 4 encoders, 64 adder
trees, 256 ROMs of 128 x 8 bits, and II = 8.

## Pipeline and timing

Every stage uses valid/ready handshakes. The ID buffer between the encoders
and the aggregator holds the `C` IDs of one vector. The aggregator copies it
when it starts that vector, so the allocator and encoders already work on
the next vector while the ROMs are being read.

* Initiation interval: `S*E` cycles (the aggregator takes a new ID vector in
  the cycle it issues its last read), with `S` cycles of encoding hidden
  behind it. Default: 8 cycles.
* Latency, input handshake to the first sum package at `lutmu_core`:
  `2S + 5` cycles. That is 2 (allocator), `S` (encode rounds), 1 (ID buffer)
  and `S + 2` (ROM read, adder tree, output register).
* Latency, input handshake to the output package of `lutmu_top`:
  `(E+1)*S + 7` cycles. Default: 23 cycles.
* Back-pressure: a full output register of the aggregator freezes the
  sequencer, ROM reads and accumulators. Earlier stages stop through their
  ready signals.

Reset (`rst_n`, asynchronous, active low) clears the valid flags and
sequencer state only. Data registers and tables are not reset.

## Loading the trained tables

The split values, LUTs, biases and thresholds come from offline training.
Before inference they are written, one word per cycle, on the `cfg` port, a
`cfg_wr_t` struct with fields `we`, `target`, `addr` and `data`
(see `lutmu_pkg`):

| target | address | data |
|---|---|---|
| `CFG_SPLIT` | `c*(2^I-1) + node` (heap order) | W-bit unsigned |
| `CFG_LUT` | `(o*C + c)*2^I + g` | 2W-bit two's complement |
| `CFG_BIAS` | `o` | 4W-bit two's complement |
| `CFG_THRESH` | `o*(2^W-1) + t` | 4W-bit two's complement |

The activation of output `o` is the number of its `2^W-1` thresholds that
the sum reaches (`sum >= T`). Thresholds need not be sorted.

To run a layer that is smaller than the build, zero the unused LUT columns
and outputs. A shallower tree also runs: give its extra levels split values
of `2^W - 1`, which no unsigned block exceeds, so those ID bits stay 0
whatever the unused clusters carry. With `d` missing levels the ID is the
shallow ID times `2^d`, and only those LUT rows need entries.

## Where this RTL departs from, or adds to, the published description

* **Table filling.** The tables are described as ROMs filled at
  configuration time. Here the second port of each "dual-port ROM" is a write
  port, and a single load bus fills every table. The load bus, its address
  map and the register storage of split values, biases and thresholds are
  this design's own.
* **Output precision.** The dataflow description gives the LUT-MU output as
  `2W`-bit, while the aggregator description and its diagram give `4W`.
  The sums here are `4W` bits.
* **Divisibility.** The ROM partition is stated with `(S/2) | C`. The encoder
  distribution (`C/S` encoders, `S` rounds) needs `S | C`, which this RTL
  requires.
* **Encoder polarity.** The encoder diagram prints bias 1 for "greater than"
  and 0 for "less or equal". The earlier MADDNESS illustration draws the
  opposite. This RTL follows the encoder diagram. Split-value order
  (heap) and unsigned comparison are choices, not given.
* **Initiation interval for E > 1.** The RTL takes `S*E` cycles per vector,
  as the text's latency formula `alpha*S*E` states. The plotted II of the
  `E > 1` partition points was not used to set the timing.
* **Choices where the description is silent:** the number of register-tree
  levels in the allocator (two here), the bit order of packages, the mapping
  of outputs and codebooks onto ROMs, the loop order `e`-outer, `s`-inner,
  the ID buffer, the one-register stages, and the stall scheme.
* **Not included.** The kn2col sliding-window unit, FIFOs, pooling and the
  exact first and last layers of a full network come from the FINN flow and
  are not part of this RTL. Neither is the offline training. A convolution
  layer therefore needs an external unit that presents each input point as
  a pruned package. Summing over the `K^2` points of a window is not
  implemented.

## What fits in one default unit

One default unit holds 32 input codebooks, 16 prototypes and 64 retained
outputs. Its tables are 32,768 LUT entries (262,144 bits), 480 split values,
64 biases and 960 thresholds. That covers the 256 x 256 MLP layer in both
evaluated LUT shapes, (32,16,64) natively and (32,8,48) with the padding
above; `tb_lutmu_workloads` runs both. It also covers MLP hidden and
classifier layers with 4 codebooks, and the 64- to 256-wide problem sizes
when the output uses 8 codebooks. A 256 x 256 problem with an output sub-vector length of 8 needs 128 outputs,
and a 3x3 kn2col convolution with 64 input channels needs 72 codebooks.
Both need a larger build (`O`, `C`). Whole ResNets are many such units plus
the surrounding dataflow, far beyond one unit.

## Verification

Each module has a self-checking testbench in `tb/`. Each one compares the
module against values computed independently in the testbench, prints
`TB_RESULT checks=N failures=M`, and has a watchdog. `lutmu_tb_pkg` holds the
reference model. It encodes by walking each tree level by level, not with the
parallel structure of the RTL, then adds up the LUT entries and counts
thresholds.

| testbench | what it covers |
|---|---|
| `tb_lutmu_encoder` | random split values, blocks and rounds; ignores writes for other encoders; 1-cycle latency |
| `tb_lutmu_allocator` | lane/round mapping, back-pressure, II = S, latency 2 |
| `tb_lutmu_rom_group` | ROM placement of every LUT entry, read latency, output hold |
| `tb_lutmu_adder_tree` | non-power-of-two tree, sign extension, bias, multi-round sums |
| `tb_lutmu_aggregator` | sums with E = 3 slides, back-pressure, II = S*E, latency S+2 |
| `tb_lutmu_core` | whole LUT-MU with E = 2, II = S*E, latency 2S+5 |
| `tb_lutmu_threshold` | `>=` counting with unsorted thresholds, slides |
| `tb_lutmu_out_pack` | reassembly of 4 slides |
| `tb_lutmu_top` | two chained units (16 activations of layer A feed layer B); counts that accumulation, multiple slides, encode/aggregate overlap, ID buffer waits, stalls, 0 and saturated activations and the layer-to-layer transfer all occur; II and latency |
| `tb_lutmu_top_full` | the default build, all 32,768 LUT entries loaded, 60 vectors; every sum and activation, II = 8, latency 23 |
| `tb_lutmu_workloads` | the default build running four layer shapes in turn, each with fresh tables: (32,8,48) padded, (32,16,64), a 4-codebook hidden layer and a 32-codebook layer with 32 outputs; II = 8 throughout |
| `tb_lutmu_partition` | four units with (S, E) = (8,4), (8,8) on the (32,16,64) shape and (8,3), (8,6) on a native (32,8,48) build; II = 32, 64, 24, 48 and latency (E+1)*S+7 |

Tables are random, not trained, so the tests check the arithmetic and
timing, not network accuracy. To run one with Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
  rtl/lutmu_pkg.sv tb/lutmu_tb_pkg.sv tb/tb_lutmu_top_full.sv \
  --top-module tb_lutmu_top_full -Mdir obj
./obj/Vtb_lutmu_top_full
```

Verilator finds the other modules by file name (`-y`). The full-size test
builds and runs in well under a minute.
