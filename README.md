# Engine-free unstructured sparsity in a LeNet-5 dataflow accelerator

A dataflow accelerator for a quantised network gives every layer its own hardware stage. The
stages stream data to one another and all run at once, so the image rate is set by the slowest
stage. The usual way to balance the stages is *folding*. Each matrix layer gets `PE` processing
elements, each taking `SIMD` inputs per cycle, and a layer that is too slow gets more of them. The
limit is that a fully unrolled layer, one multiplier per weight, is very expensive.

Pruning deletes individual weights, but a folded layer cannot use that: its weights sit in a memory
and a zero weight costs a memory slot and a multiply like any other weight. Exploiting *unstructured*
sparsity usually means a dedicated sparse engine, with compressed weight formats, index decoding and
run-time scheduling. This design avoids that by combining pruning with full unrolling. Once a layer
is fully unrolled, every weight is a constant that is wired into the logic. A pruned weight then
produces **no hardware at all**: no multiplier, no adder input, no memory bit and no control. The
irregular pattern is absorbed when the design is elaborated. The layer keeps running at one vector
per cycle, and it costs only a fraction of its dense unrolled size.

This RTL applies that idea to LeNet-5. The first convolution's matrix part (C1M) is the stage that
would otherwise be the bottleneck. It is fully unrolled and pruned. All other layers stay dense and
folded, each with enough parallelism to keep up with it.

## The pipeline

```
 pixel  ┌────┐ 25×8b ┌─────┐ 6×4b ┌─────┐      ┌────┐ 150×4b ┌─────┐ 16×4b ┌─────┐      ┌────┐ 400×4b ┌─────┐ 120×4b ┌────┐ 84×4b ┌────┐ 10×20b
 ──────►│ C1 │──────►│ C1M │─────►│ C1P │─────►│ C2 │───────►│ C2M │──────►│ C2P │─────►│ C3 │───────►│ C3M │───────►│ F1 │──────►│ F2 │──────► scores
  8b    └────┘       └─────┘      └─────┘      └────┘        └─────┘       └─────┘      └────┘        └─────┘        └────┘       └────┘
         swg       mvtu_sparse    maxpool       swg       mvtu_folded      maxpool       swg       mvtu_folded  mvtu_folded mvtu_folded
```

| stage | module        | geometry                          | folding           | cycles / image |
|-------|---------------|-----------------------------------|-------------------|----------------|
| C1    | `swg`         | 32×32×1 → 784 windows of 5×5×1    | 1 pixel/cycle     | 1024           |
| C1M   | `mvtu_sparse` | 25 → 6, 46 of 150 weights kept    | fully unrolled    | 784            |
| C1P   | `maxpool`     | 28×28×6 → 14×14×6                 | 1 pixel/cycle     | 784 in, 196 out |
| C2    | `swg`         | 14×14×6 → 100 windows of 150      | 1 window/cycle    | 196 in, 100 out |
| C2M   | `mvtu_folded` | 150 → 16                          | SIMD 25, PE 8     | 100 × 12 = 1200 |
| C2P   | `maxpool`     | 10×10×16 → 5×5×16                 | 1 pixel/cycle     | 100 in, 25 out |
| C3    | `swg`         | 5×5×16 → 1 window of 400          | 1 window/cycle    | 25 in, 1 out   |
| C3M   | `mvtu_folded` | 400 → 120                         | SIMD 16, PE 8     | 375            |
| F1    | `mvtu_folded` | 120 → 84                          | SIMD 12, PE 7     | 120            |
| F2    | `mvtu_folded` | 84 → 10, raw sums                 | SIMD 12, PE 2     | 35             |

C2M is the slowest stage at 1200 cycles per image, followed by the 1024 input pixels of C1. In
steady state the accelerator therefore takes one image every 1200 cycles. It could take one every
1024 if C2M were folded less. Had C1M been folded like the other layers, for example 25×1, it
alone would need 784 × 6 = 4704 cycles per image.

Numbers: weights are 4-bit signed, activations 4-bit unsigned, input pixels 8-bit unsigned, and
accumulators 20-bit signed. Every layer except F2 ends in a 15-threshold activation. F2 outputs
its ten raw sums as class scores. The arg-max that picks the class is left to the consumer.

## Stream conventions

Every connection is a valid/ready stream. A beat moves when `valid && ready` at a rising clock
edge. A stage that offers a beat keeps it, unchanged, until the beat is taken; each module asserts
this rule on its output. One beat carries a complete item:

* a pixel: all `C` channels, channel `c` in bits `[c*W +: W]`;
* a window: `K*K*C` elements in (ky, kx, c) order with c fastest. This is also the column order of
  the weight matrices, so window element `j` meets weight column `j`;
* a vector: all `MH` outputs of a matrix unit, row `r` in bits `[r*W +: W]`.

Reset is synchronous and active low (`rst_n`). It clears only control state. Data registers and
buffers are left as they are, because nothing reads them before they are written.

## The matrix units

### Fully unrolled sparse unit (`mvtu_sparse`, C1M)

Each output row is a chain of constant-coefficient multiply-adds. The chain is built by a
`generate` loop over the columns, which asks `ls_pkg::weight` for the weight at elaboration time:

```systemverilog
if (WV != 0) assign ps[c+1] = ps[c] + x[c] * WV;   // connection kept
else         assign ps[c+1] = ps[c];               // pruned: nothing built
```

The row's thresholds are constants as well, so each comparator compares against a constant.
The sum is combinational and the activations are registered: latency is one cycle and throughput
is one window per cycle. The output register is the stage's only storage. The local parameter
`NNZ` gives the number of connections actually built (46 of 150 with the default tables).
Whether a zero weight is "skipped" is decided once, by the synthesis tool. Nothing about sparsity
remains at run time.

### Folded dense unit (`mvtu_folded`, C2M, C3M, F1, F2)

`PE` rows are computed in parallel, each over `SIMD` input elements per cycle. One pass over a
group of `PE` rows takes `SF = MW/SIMD` cycles, and `NF = MH/PE` such groups cover the matrix, so
a vector takes `SF·NF` cycles. The weight ROM has `NF·SF` words of `PE·SIMD` weights, read in the
order (neuron fold, synapse fold). The threshold ROM has `NF` words of `PE` threshold lists. Both
ROMs are built from constants at elaboration and synthesise to read-only logic. A zero weight in
this unit costs as much as any other weight, which is why the design prunes only C1M.

Timing: the unit has an input register next to the vector being worked on. The next vector can
therefore arrive during the current computation, and the unit sustains exactly one vector every
`SF·NF` cycles. From an idle unit, `out_valid` rises `SF·NF + 1` clock edges after the edge that
accepted the vector. On its last fold step the unit waits if the previous result has not been
taken yet. `in_ready` depends combinationally on `out_ready` through that stall.

### Threshold activation (`thresholding`)

The activation is the number of the channel's ascending thresholds that the accumulator reaches
(`acc >= T[k]`). With 15 thresholds this gives a 4-bit unsigned activation. Batch-norm and the
quantiser fold into the threshold values. Because this mapping never decreases, max pooling
after the threshold gives the same result as max pooling before it.

## Window generators and pools

`swg` writes the incoming frame into one of two frame banks. It emits the window for output
position (oy, ox) as soon as the window's last pixel, raster index (oy+K−1)·IFM + ox+K−1, has been
written. Reading therefore follows writing closely within a frame. The second bank lets the next
frame stream in while a slow consumer is still taking the windows of the previous one. When the
consumer is always ready, the generator takes one pixel per cycle with no gap, also across frames.
The two banks are the simplest correct structure. A line-buffer version would need K rows instead
of two frames, at the cost of more intricate control.

`maxpool` keeps the maximum of each horizontal pair of an even row in a half-row buffer. On the
odd row it combines that with the new pair and emits the pooled pixel. It takes one pixel per cycle
and produces one output per four inputs.

## Weights and thresholds

The trained, pruned LeNet-5 weights are not available. Instead, `ls_pkg` generates every table
entry from a hash of (seed, row, column), using constant functions:

* `weight(seed, r, c, density)` is uniform in [−8, 7]. It is forced to 0 unless `(h >> 8) % 100 <
  density`, where `h` is the 32-bit hash. C1 keeps 30 % of its connections; the other layers are dense.
* `threshold(seed, ch, k, step) = (k − 7)·step + off(ch)` for k = 0…14, where `off(ch)` is a
  per-channel offset of less than half a step. The step is chosen per layer to match the spread of
  that layer's sums.

Here `h = mix(mix(mix(seed·0x9e3779b9 + 1) + r) + c)`, where `mix` is a 32-bit
xorshift-multiply mixer (shift 16, multiply by 0x7feb352d, shift 15, multiply by 0x846ca68b,
shift 16). The threshold offset uses the same hash with seed + 1000.

To run a real model, replace these two functions with the trained values. The sparse unit can
also take a weight table directly, through its `W_TABLE` parameter with `USE_TABLE` set. A
different pruning pattern changes only which `g_tap` blocks exist in `mvtu_sparse`.

## How far it can be trusted

Each module has a self-checking testbench in `tb/`. Each testbench compares against values worked
out with plain integer arithmetic in the testbench, not with the RTL:

| testbench          | what it shows |
|--------------------|---------------|
| `tb_thresholding`  | 3,800 accumulators on, just below and just above thresholds, and at both saturation ends |
| `tb_mvtu_folded`   | C2M configuration and a one-cycle raw-sum configuration. Every output; one vector per SF·NF cycles; latency; random gaps and back-pressure |
| `tb_mvtu_sparse`   | C1M configuration. Every output; one window per cycle; one-cycle latency; number of connections built equals the number of non-zero weights. Also a 3×3 instance built from the table [−5 0 −6; 6 0 0; 0 7 −3]; it must build exactly 5 connections |
| `tb_swg`           | Every window of four 14×14×6 frames; no lost input cycle; use of the second bank under a slow consumer |
| `tb_maxpool`       | Every pooled pixel of three 28×28×6 frames at full rate and under back-pressure |
| `tb_lenet5_top`    | 34 images through the whole network at the default configuration, with a bit-exact integer reference. Steady-state image interval of 1,200 cycles, checked against a bound of 1,280. Back-pressure from a blocked sink travelling through folded layers to the input; second-bank writes; C1 activations saturating at 0 and 15 |

Departures from the accelerator as originally described:

* **Sizes and folding are this design's own.** The source names LeNet-5, its layer list, the
  pruned full unrolling of the first convolution and "partial unrolling" of some fully connected
  layers. It gives no bit widths, PE/SIMD values, layer dimensions or clock. Classic LeNet-5
  dimensions are used. The folding is chosen so that every stage stays within 1,280 cycles per
  image, the bottleneck figure reported for the pruned and folded design.
* **Weights are synthetic**, so accuracy cannot be measured. The reported model has 97.82 %
  accuracy and 51.6× compression.
* **Latency in microseconds and throughput in frames per second are not checked.** They depend on
  a clock frequency that is not given. At 300 MHz, 1,200 cycles per image would mean 250,000
  images per second.
* **Stream formats and buffering are this design's own.** Whole pixels, windows and vectors per
  beat; double frame buffers in the window generators; an input register in every folded unit.
  Tool-generated FINN stages move narrower beats and use line buffers.
* **Not included**: the design-space exploration that chooses what to prune and how to fold. That
  is offline software. Also not included is the host and memory infrastructure of the FPGA card:
  the top exposes plain pixel and score streams in its place.

## Simulating

Every testbench finishes with a line `TB_RESULT checks=N failures=M`. With Verilator 5:

```sh
verilator --binary --timing --assert -Wno-fatal --top-module tb_lenet5_top \
          -y rtl -y tb rtl/ls_pkg.sv tb/tb_lenet5_top.sv -o sim
./obj_dir/sim
```

Replace `tb_lenet5_top` with any other testbench name. The top-level test compiles in about a
minute and then runs in well under a second. `verilator --lint-only -Wall -y rtl rtl/ls_pkg.sv
rtl/lenet5_top.sv` lints the whole design. Three warnings remain, and all are expected. Two input
columns of C1M are unused because every weight in them is pruned. `NNZ` is read only by
testbenches. F2 has an unused threshold word because it has no activation. Linting a single module
also lists the package constants that module does not use.

To change the design:

* **Folding**: the parameters `*_SIMD` and `*_PE` of `lenet5_top`. `SIMD` must divide the layer's
  input length and `PE` its output count.
* **Sparsity of C1M**: `ls_pkg::C1_DENSITY`.
* **Bit widths**: `ls_pkg::W_BITS`, `A_BITS` and `ACC_BITS`.
* **Unrolling another layer**: replace its `mvtu_folded` by an `mvtu_sparse` with the same
  `MW`/`MH`. Its `swg` then feeds it a window per cycle.
