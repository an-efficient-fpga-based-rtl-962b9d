# Deep-forest cascade accelerator in SystemVerilog

A deep forest classifier is a cascade of layers, and each layer holds several forests of
decision trees. Every forest turns its input into a class vector: the mean of the leaf
values of its trees. Each layer's input is the previous layer's class vectors joined to
the sample's original features. Inference multiplies nothing. It is a large number of
"compare one feature with a threshold, go left or right" steps spread over hundreds of
trees, and the trees differ in how long their root-to-leaf paths are.

This RTL carries out the cascade's inference entirely in on-chip memory and logic. It uses
three ideas:

* **A 32-bit node word.** Trees are stored in pre-order, so a node's left child is always
  the next word. Only the right child's address needs storing, and its sign bit marks a
  leaf.
* **A node computing unit (NCU) that walks 8 trees one after another**, at four clock
  cycles per node. A group of 8 trees smooths out the differences in path length between
  single trees. The NCUs of a forest run in parallel.
* **A layer pipeline.** Every cascade layer has its own hardware and works on a different
  sample. Up to four samples are in flight at once.

The default configuration matches a 4-layer cascade with 2 forests of 32 trees per layer
(256 trees, 32 NCUs), the size of the model the architecture was evaluated with on the
ADULT data set. The design is written as an FPGA design: memories are plain arrays with
synchronous reads, and no vendor primitives are used.

## 1. Tree storage

Each nodes RAM belongs to one NCU. It holds 8 trees of up to 8 levels (at most 255 nodes).
Tree `t` takes words `t*256 … t*256+255`, and its root is at offset 0. The RAM address is
`{tree[2:0], node[7:0]}`, which is 2048 words.

| bits    | internal node               | leaf                       |
|---------|-----------------------------|----------------------------|
| [31:25] | `feature_idx` (7 bits)      | unused                     |
| [24:9]  | `threshold` (n = 16 bits)   | `leaf_value` (16 bits)     |
| [8]     | 0                           | 1 (the sign bit, `is_leaf`)|
| [7:0]   | right-child address         | unused                     |

The three fields, the 32-bit word and m = 9 bits for the right-index field come from the
architecture. The split between `feature_idx` and `threshold` is this design's choice
(7 + 16), as is putting the leaf flag in the MSB of the right-index field. Leaf values and
features are unsigned 16-bit numbers. A leaf value is the fraction of training samples of
the positive class at that leaf (0xFFFF ≈ 1.0). With this encoding a two-class problem
needs one number per forest, and both evaluated data sets have two classes.

A tree is written in pre-order like this: the root, then the whole left subtree, then the
whole right subtree. Each internal node's `right_idx` is the offset where its right subtree
starts. The left child is implicit (`current + 1`), which saves 8 of the 40 bits a
conventional node would need.

## 2. The NCU and its four-cycle node period

`ncu` works together with an `update` module. The update module holds `currentnode_idx`
and a counter, 0…3, that is the NCU's phase. One node takes one period:

| phase | what happens |
|-------|--------------|
| 0 | the nodes RAM is read at `{finish_count, currentnode_idx}` |
| 1 | the node word is on the RAM output. `threshold` is copied into `threshold_reg`, and the feature at `{finish_count, feature_idx}` is requested from the feature port (no request for a leaf) |
| 2 | the feature arrives. The comparator `feature <= threshold_reg` (combinational) steers a multiplexer between `left_idx = currentnode_idx + 1` and `right_idx`. The result is registered as `nextnode_idx` |
| 3 | `update` loads `currentnode_idx` with `nextnode_idx`. For a leaf it loads 0 instead, `finish` is high, `leaf_value` is added to `prob_total`, and the tree counter `finish_count` advances |

`finish_count` therefore selects both the tree's region in the nodes RAM and the tree
window of the feature address (section 4). After a leaf, the next period starts at the root
of the next tree without a gap. After the 8th tree, `done` rises and the NCU stops. An NCU
needs exactly `4 × (nodes visited over its 8 trees)` cycles. A tree that is a single leaf
costs one period.

Which operation falls in which of the four cycles is this design's choice; the architecture
fixes only the period of four cycles and the blocks. So is the convention that
`feature <= threshold` goes left, which is the usual one for tree learners.

## 3. Forests, layers and the class vector

* `pe` is one forest of 32 trees: 4 NCU/update pairs of 8 trees each, all started
  together. When the last NCU finishes, `average` adds the 4 `prob_total`s and shifts the
  sum right once per cycle, 5 times (÷32). The PE then gives a one-cycle `done` with the
  forest mean. Latency: `4 × (nodes of the slowest NCU) + 8` cycles after start.
* `cascade_layer` holds 2 PEs: forest A (completely random trees) and forest B (random
  forest). They differ only in their tree contents. Each PE's mean is captured in the
  end-of-layer pipeline register as soon as that PE is done. The two registers are the
  layer's class vector and stay stable until the layer has finished its next sample.
* `final_average` averages the last layer's two entries into the result. The class is 1
  when the mean is at least 0.5.

About the forest size: the architecture's description says a PE has 8 NCUs, but it also
says a forest has 32 trees and an NCU serves 8 of them. The two statements cannot both
hold. The RTL follows the 32-tree reading (`N_NCU = 4`), which the published memory usage
also supports. Setting `N_NCU = 8` on `df_top` gives 64-tree forests; the average then
divides by 64 automatically.

## 4. Feature addressing and the layer buffers

Every feature read uses a 10-bit address `{finish_count, feature_idx}`: 8 tree windows of
128 features. Tree `t` of every NCU reads window `t`, which gives a group of 8 trees up to
1024 distinct features with a 7-bit field. The software that lays out a model must place
each tree's features in that tree's window. Forming the address this way comes from the
architecture. Reading it as a per-tree window of a larger vector is this design's
interpretation.

* **Input SRAMs** (`input_buffer`). There are three, one per multi-grained-scanning
  vector. Each one holds `SLOTS = 5` samples of 1024 words: one sample per layer in flight,
  plus one being loaded. An SRAM is built of 8 banks, one per tree window.
* **Broadcast writes.** A model without multi-grained scanning has a single feature vector,
  and every tree may test any feature of it. That vector is needed in every window of
  every SRAM. A write with `in_bcast` set stores its word at index `in_addr[6:0]` of all 24
  banks at once, so such a sample loads in as many beats as it has features (14 for a
  14-attribute model instead of 336). The broadcast is this design's addition.
* **Layer 0** reads input SRAM 0 directly.
* **Layer k ≥ 1** reads through `layer_buffer` k, which holds the class vector of layer k-1
  and the slot of its sample. Each read is the concatenation of the two:
  * `feature_idx` 0 and 1 of every window return the two class-vector entries;
  * any other index is forwarded to input SRAM `(k-1) mod 3` at the same address.

  So layers 1, 2 and 3 see scanning vectors 0, 1 and 2. A model must leave indices 0 and 1
  of every window free in the original vectors of layers ≥ 1.

All feature reads have one cycle of latency. Every NCU has its own read port, so in
hardware an input SRAM becomes a memory with many read ports (in an FPGA, replicated block
RAMs). The original-feature path of a fifth buffer after the last layer is not built: only
its class vector is used, by `final_average`.

## 5. The layer pipeline and the controller

The `controller` runs the layers in lock step, one sample per layer, in epochs:

1. **Advance** (one cycle, when every layer holding a sample is done):
   * the sample in the last layer leaves, and its result is pushed into `output_buffer`;
   * every other sample moves one layer on, and the layer buffers load the previous
     layers' registers;
   * the oldest fully loaded sample, if any, enters layer 0.
2. **Start**: in the next cycle, every layer that now holds a sample gets a start pulse.
3. **Run** until all started layers are done.

An epoch with no waiting takes `4 × (nodes of the slowest NCU in any busy layer) + 12`
cycles. With depth-8 trees averaging about 7.8 visited nodes, that is about 262 cycles per
sample, or about 1.5 M samples/s at 400 MHz. The latency of one sample is four epochs.
This holds only while loading a sample takes no longer than an epoch. The input stream
carries one word per cycle, so three scanning vectors of `F` features per window cost
`24F` cycles per sample. Beyond about 11 features per window the input stream, not the
trees, sets the rate.

Mechanisms that change the flow:

* **Input back-pressure.** `in_ready` falls while all 5 input slots hold samples that are
  either waiting or in the pipeline.
* **Output stall.** No advance while the output buffer (16 results) is full and the last
  layer holds a result.
* **Bubbles.** If no complete sample is waiting, layer 0 stays empty for that epoch, and
  the pipeline still drains.

The lock-step advance rule, the slot bookkeeping, the input stream format and the FIFO
depth are this design's choices. The controller's role (loading from DRAM, moving data into
the layer buffers, counting results) follows the architecture.

## 6. Top-level interface (`df_top`)

All signals are synchronous to `clk`; `rst_n` is an asynchronous, active-low reset.

| group | signals | use |
|-------|---------|-----|
| trees | `cfg_we, cfg_layer[1:0], cfg_pe, cfg_ncu[1:0], cfg_addr[10:0], cfg_data[31:0]` | one node word per cycle into the nodes RAM of (layer, PE, NCU), `cfg_addr = {tree slot, node}`. Trees `8i…8i+7` of a forest go to NCU `i`. Load trees only while no sample is in flight |
| samples | `in_valid, in_ready, in_sram[1:0], in_addr[9:0], in_data[15:0], in_last, in_bcast` | one feature per accepted beat into input SRAM `in_sram` at `in_addr`, or with `in_bcast` into every window of every SRAM at `in_addr[6:0]`; `in_last` marks the last word of a sample. Only the words the trees read need sending |
| results | `out_valid, out_ready, out_prob[15:0], out_class` | one result per sample, in input order |
| status | `result_count[31:0]` | number of results produced |

The off-chip DRAM and the multi-grained scanning that produces the feature vectors are not
part of the RTL. Their traffic is the `in_*` and `out_*` streams.

Parameters of `df_top`: `N_LAYERS` (4), `N_PE` (2), `N_NCU` (4), `N_SRAM` (3),
`FEAT_WORDS` (1024) and `OUT_DEPTH` (16). The node format and the 8 trees per NCU are in
`df_pkg`. At the defaults, the memories are 32 nodes RAMs of 64 Kbit (2 Mbit) plus 240
Kbit of input SRAM. A 3-layer model such as the evaluated face-mask model needs
`N_LAYERS = 3`.

## 7. How far to trust it

Every block has a self-checking testbench with an independent software model
(`tb/tb_df_pkg.sv`), which builds random pre-order trees and walks them.

* `tb_ncu` and `tb_pe` check the sums and means. They also check the exact cycle counts:
  4 per node, `4N + 8` for a PE.
* `tb_df_top` runs the whole default-size design end to end:
  * 256 random trees and 40 samples;
  * every result compared bit-exactly with a software cascade;
  * the length of every pipeline epoch checked against `4N + 11` busy cycles.

  It also requires each mechanism to occur: output stall, input back-pressure, a full
  pipeline, bubbles, class-vector reads, NCUs of one PE finishing at different times, and
  samples loaded with broadcast writes. It runs in a few seconds.
* `tb_workloads` runs two model shapes, each with every result checked:
  * a 4-layer model on 14 features, loaded with broadcast writes, like the ADULT model;
  * a 3-layer model on three scanning vectors of 32 features per window (`N_LAYERS = 3`),
    shaped like the face-mask model.

  It prints the cycles per result. With random depth-8 trees the first runs at about 258
  cycles per result, bound by the trees. The second is bound by its 768 input words per
  sample.

Not verified: behaviour with real trained models, and timing
closure at 400 MHz.

Simulate any block with plain Verilator, for example:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
    rtl/df_pkg.sv tb/tb_df_pkg.sv tb/tb_df_top.sv --top-module tb_df_top
./obj_dir/Vtb_df_top
```

Each testbench ends with `TB_RESULT checks=N failures=M`.

## 8. Files

`rtl/df_pkg.sv` holds the shared constants and types. The modules in `rtl/`, bottom up:

* `node_ram`, `update`, `ncu`;
* `average`, `pe`, `cascade_layer`;
* `input_buffer`, `layer_buffer`, `final_average`, `output_buffer`, `controller`;
* `df_top`.

`tb/tb_<module>.sv` is the testbench of each module. `tb/tb_workloads.sv` and its helper
`tb/wl_runner.sv` run the two model shapes.
