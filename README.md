# Hybrid NN + hyperdimensional inference engine

A hyperdimensional (HD) classifier is cheap to train: it maps each input to a long random
binary vector, adds up the vectors of each class into a class centroid in one pass, and
classifies by Hamming distance to the centroids. Its weakness is the mapping. Raw features
are quantised into a few levels, and neighbouring levels get very similar hypervectors, so
much information is lost. Such classifiers therefore need ~10,000 dimensions to reach
usable accuracy.

The hybrid scheme puts a small fully-connected neural network in front of the HD classifier
and trains it with the HD encoder in its loop, so that the features it extracts survive
encoding. With such features the HD classifier works with as few as **16 dimensions**.
The HD stage then becomes small enough to build fully parallel and pipelined.

This repository is SystemVerilog for the inference hardware of that scheme:

* an **NN processing module**: a weight-stationary systolic array of multiply-accumulate PEs,
  row tree adders, ALUs for batch normalisation and ReLU/PACT, weight/input/output buffers and
  a static sequencer. It runs the feature-extraction layers.
* an **HD processing module**: level lookup tables, binding XORs, majority counters,
  comparators, Hamming-distance units and a tree comparator, all in parallel. It
  classifies one feature vector per clock.
* `synergic_top`, which chains them.

The default configuration is the spoken-letter (ISOLET-style) setup: 617 features, 26
classes, 16-dimensional hypervectors, 4 quantisation levels, two 617-neuron layers and a
32 x 32 array. Training, including finding the centroids and the network weights, happens
off-chip and is not part of this RTL.

## Data path at a glance

```
              external memory (not modelled: write/read ports of synergic_top)
      weights |            input |          BN params |             ^ final activations
              v                  v                    v             |
       +--------------+   +--------------+                   +---------------+
       | weight_buffer|   | input_buffer |<--- reroute ------| output_buffer |<--> nn_alu x H
       +--------------+   |  (2 banks)   |                   +---------------+
              |           +--------------+                          ^
              | 1 weight/row     | 1 chunk of W values              | H row sums
              v                  v                                  |
       +------------------------------------+    +-------------+    |
       | systolic_array  H rows x W columns |--->| tree_adder  |----+
       |  pe: reg file, multiply, accumulate|    |  x H rows   |
       +------------------------------------+    +-------------+
                                    last layer's activations
                                             |
                                             v
   hd_processing_module:  hd_level_lut x D_L -> hd_binding_units -> hd_bundling
                          -> hd_hamming (C centroids) -> hd_tree_comparator -> class
```

## How a layer runs on the array

This is the least obvious part of the design.

A fully-connected layer with `d_in` inputs and `d_out` neurons is cut into
`K = ceil(d_in / W_SYS)` input **chunks** and `T = ceil(d_out / H_SYS)` output **tiles**.
Array row `r` computes neuron `j*H_SYS + r` of tile `j`. Column `c` handles element
`k*W_SYS + c` of chunk `k`. Every PE has a register file of `RF_DEPTH >= K` weights, one per
chunk. For each tile, the sequencer (`nn_controller`) runs these phases:

| phase  | cycles            | what happens |
|--------|-------------------|--------------|
| LOAD   | `K*W_SYS + 2`     | The weight buffer is read once per cycle. Each word holds one weight per row and enters the row's shift chain one cycle later. After `W_SYS` shifts a row is in place, and a commit writes it into register entry `k` of every PE. |
| STREAM | `K`               | Chunk `k` is read from the input buffer and reaches every PE of its column in that cycle. Each PE accumulates `rf[k] * x`. The accumulator is cleared on `k = 0`. |
| REDUCE | `log2 W_SYS`      | The pipelined tree adder of each row sums its `W_SYS` accumulators. |
| WRITE  | 1                 | The `H_SYS` row sums go into the output buffer's pre-activation row. |
| ALU    | 1                 | `H_SYS` ALUs turn the row into activations. The activations are written to the output buffer and rerouted into the other input-buffer bank. |

The analytical model counts only STREAM + REDUCE:
`(ceil(d_in/W_SYS) + log2 W_SYS) * ceil(d_out/H_SYS)` cycles per layer. The design meets that
count exactly, and `compute_cycles` reports it. At the defaults (two 617 -> 617 layers on a
32 x 32 array) it is 2 x (20 + 5) x 20 = 1000 cycles. With weight loading and
ALU steps, one inference takes 26,761 cycles from `start` to the NN's end, plus 5 for the HD
stage. Weight loading dominates, because every weight is used exactly once per input vector.

The input buffer has two banks. Layer `l` reads bank `l % 2` and writes its output into the
other bank. The network input goes into bank 0. Elements at or past `d_in` read as zero,
which pads the last chunk.

### Weight word layout

Whoever fills the weight buffer (normally a compiler) must use this order. For layer `l`,
tile `j`, chunk `k` and shift `s` (0 .. W_SYS-1), the word at

```
layers[l].wbase + (j*K + k)*W_SYS + s
```

holds, in bits `[r*DATA_W +: DATA_W]` for row `r`, the weight `W[j*H_SYS + r][k*W_SYS + W_SYS-1-s]`.
The word is zero where the neuron or the input lies outside the layer. The column index is
reversed because the first weight shifted in travels furthest along the row.
`tb/synergic_top_tb.sv` has a loop that builds this layout.

### Layer descriptors

The sequencer is driven by `layers[NUM_LAYERS]`, an array of `synergic_pkg::layer_desc_t`
with these fields:

* `d_in`, `d_out`: layer sizes.
* `wbase`: the layer's first word in the weight buffer.
* `alu`: an `alu_cfg_t` with `bn_en`, `act` (none / ReLU / PACT), `shift` and `pact_alpha`.

The descriptor stands in for the instruction stream that the original flow's compiler
generates. Its format is this design's own.

### ALU arithmetic

Numbers are signed 8-bit weights and activations with 32-bit accumulators. The ALU computes,
per neuron `n` of layer `l`:

```
y   = bn_en ? ((pre * gamma[l][n]) >>> shift) + beta[l][n] : pre >>> shift
y   = ReLU: max(0, y)      PACT: min(max(0, y), pact_alpha)      none: y
act = saturate(y, -128, 127)
```

`gamma` (16 bit) and `beta` (32 bit) are written through the `bn_*` port, at address
`l*IB_DEPTH + n`.

## The HD classifier

All hypervectors are `D_H` bits (16 by default). The module holds three hard-wired tables.
Each is a set of constants produced at elaboration by the hash `synergic_pkg::hv_bit(salt,
row, bit)`:

* **level hypervectors** (`hd_level_lut`, salt 2). Level 0 is pseudo-random. Level `i` is
  level 0 with bits `0 .. i*floor(D_H/Q)-1` inverted, so consecutive levels differ in
  `floor(D_H/Q)` bits. A feature is quantised as `feat < 0 ? 0 : feat >> (7 - log2 Q)`:
  with Q = 4, values 0-31, 32-63, 64-95 and 96-127 select levels 0 to 3.
* **feature seeds** `s_i` (`hd_binding_units`, salt 1): one per feature.
* **class centroids** `t_k` (`hd_hamming`, salt 3): one per class.

For real use, replace the three generators with the trained tables. The hardware does not
care where the constants come from.

Per input vector, the module computes:

```
bound_i = s_i XOR level(feat_i)                          (D_L binding units)
cnt_b   = #{i : bound_i[b] = 1} - #{i : bound_i[b] = 0}   (D_H majority counters,
enc_b   = cnt_b > 0                                       ceil(log2(D_L+1))+1 bits each)
dist_k  = popcount(enc XOR t_k)                           (C unbinding units + adders)
class   = argmin_k dist_k, lowest k on ties               (tree of '<' comparators)
```

The pipeline has five register stages: bound vectors, counts, encoded vector, distances,
class. It accepts a vector every cycle, and each result appears exactly 5 cycles after its
input. The majority counts are parallel sums rather than counters stepped once per input.
That keeps the whole module fixed-latency.

## Using `synergic_top`

1. Write the weights (`wb_we/wb_waddr/wb_wdata`) in the layout above.
2. Write the batch-norm parameters (`bn_*`) and the input vector (`ib_we/ib_waddr/ib_wdata`,
   one element per cycle into bank 0).
3. Hold `layers` stable and pulse `start`. `busy` goes high. Further `start` pulses are
   ignored until the run ends.
4. When `done` pulses, `cls` is the predicted class, `min_dist` its Hamming distance and `enc`
   the encoded hypervector. The final-layer activations stay readable on `ob_raddr/ob_rdata`.

The last layer's `d_out` must equal `D_MAX`, which is also the HD feature count. All state
has an asynchronous active-low reset `rst_n`, except the memories (buffers, register files,
BN memory), which must be written before they are read.

## Parameters

| parameter | default | origin |
|-----------|---------|--------|
| `D_MAX` (features, neurons per layer) | 617 | ISOLET feature count |
| `C` (classes) | 26 | ISOLET classes |
| `D_H` (hypervector bits) | 16 | reported hardware configuration |
| `Q` (quantisation levels) | 4 | value used in the experiments |
| `NUM_LAYERS` | 2 | two feature-extraction layers, as in the reported networks |
| `W_SYS`, `H_SYS` | 32, 32 | chosen: 1024 MACs, about the 15% of the target FPGA's DSPs that was reported |
| `DATA_W`, `ACC_W`, `GAMMA_W` | 8, 32, 16 | chosen |
| `RF_DEPTH` | ceil(D_MAX/W_SYS) = 20 | chosen so that a whole layer input fits |
| `WB_DEPTH` | 25,600 words | chosen: both default layers at once |

## Departures and gaps

* **Pooling** is not built. Batch normalisation and activations are. The evaluated networks are
  fully connected, and no pooling window is specified.
* **Weight buffer size.** The buffer holds all weights of both layers, about 6.5 Mbit. The
  reported FPGA build used far less block RAM, so it must have streamed weights from
  external memory during a run. This design has no such refill path.
* **Vertical input flow.** The architecture drawing shows inputs passing from PE to PE down a
  column. Here a column's input reaches all its PEs in the same cycle, with no register per PE,
  so that the cycle count matches the analytical model.
* **Instruction format.** The compiler, its loop transformations and its instruction set are
  not described. The layer descriptor replaces them.
* **Hard-wired tables** are pseudo-random, not trained. The level table flips bits in index
  order rather than at random positions, which gives the same distances.
* **Multiplexers** drawn between the binding units and majority counters are not modelled.
  Their select function is not specified. They are probably for the vector-sequential variant.
* **Vector-sequential HD variant.** The lower-resource variant, with counters and adders used
  sequentially, is not built. Only the fully parallel module, which was the reported
  configuration, is here.
* **Adder-limited Hamming trees.** The reported HD cost sweep capped each tree-adder stage
  at 16 adders, which lengthens the latency as `D_H` grows. Here each class distance is one
  full-width popcount registered in a single stage. At `D_H = 16` this makes no difference
  to the result, only to timing closure at large `D_H`.
* **NN latency.** One default inference takes 1,000 compute cycles, which matches the
  analytical formula: two 617-to-617 layers at (20 + 5) x 20 cycles each. It also takes about
  25,600 cycles to load weights from the weight buffer into the PE register files, since the
  weight buffer delivers one weight per row per cycle. The reported 23.12 us at 344 MHz
  (about 7,950 cycles) suggests the original build hid more of that transfer. This design does not
  overlap loading with computing.
* **On-chip training.** Updating centroids on chip (incremental learning) is not built. The
  hardware described is for inference.
* Other sizes in the experiments (HAR's 561 features and 6 classes, `D_H` up to 10,240) need a
  re-elaboration with `D_MAX`, `C` and `D_H` changed. The NN side already accepts any
  `d_in, d_out <= D_MAX` at run time.

## Verification

Every module has a self-checking testbench in `tb/`, named `<module>_tb`. Each one compares
against values computed in the testbench itself and prints
`TB_RESULT checks=N failures=M`. Highlights:

* `nn_controller_tb` replays the whole schedule cycle by cycle: addresses, shift/commit
  pulses, stream indices, write/ALU pulses. It checks `compute_cycles` against the analytical
  formula.
* `nn_processing_module_tb` and `synergic_top_tb` run complete inferences at reduced size
  (4 x 4 array, 10 features) against a reference forward pass plus HD encoder and classifier.
  `synergic_top_tb` also confirms that partial chunks, partial tiles, rerouting, ReLU clamping,
  PACT clipping, saturation, batch normalisation, ignored `start` pulses and every
  quantisation level all occur.
* `synergic_top_full_tb` runs the same end-to-end check at the default sizes (617 features,
  32 x 32 array, 26 classes). It takes about 30 s of simulation.
* `synergic_top_har_tb` does the same for the activity-recognition size. It elaborates the top
  with `D_MAX = 561` and `C = 6` and keeps the 32 x 32 array, which gives 828 compute cycles.
* `hd_processing_module_tb` feeds a vector every cycle, with bubbles, and checks the 5-cycle
  latency and the one-result-per-cycle throughput.

To simulate with Verilator 5 (example: the full-size test):

```
verilator --binary --timing --assert -Wno-fatal -y rtl --top-module synergic_top_full_tb \
  rtl/synergic_pkg.sv tb/synergic_top_full_tb.sv
./obj_dir/Vsynergic_top_full_tb
```

`-y rtl` lets Verilator find each module in `rtl/<name>.sv`. The package must come first on
the command line. Replace the testbench name to run any other test. `-Wno-fatal` keeps the
testbenches' width warnings from stopping the build.

What these tests establish: the RTL computes the arithmetic described above, exactly and with
the stated timing. They do not establish classification accuracy, which depends on trained
weights and centroids that are not part of this code.
