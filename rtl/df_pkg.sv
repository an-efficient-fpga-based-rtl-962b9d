// df_pkg: types and constants shared by the deep-forest cascade accelerator.
//
// A tree node is one 32-bit word (layout of the paper's storage scheme):
//   [31:25] feature_idx   which feature the node tests (7 bits)
//   [24:9]  threshold     for an internal node, or leaf_value for a leaf (n = 16 bits)
//   [8:0]   right_idx     m = 9 bits: bit 8 is the sign bit (1 = leaf), bits 7:0 the
//                         address of the right child inside the tree's region
// Trees are stored in pre-order, so the left child of a node always sits at the next
// address and never needs storing. One nodes RAM holds 8 trees of depth up to 8, each in
// a 256-word region. The 32-bit word, m = 9 and the 8-tree grouping follow the paper; the
// split n = 16 / feature_idx = 7 and the sign bit being the MSB of right_idx are this
// design's choices.
package df_pkg;
  localparam int NODE_W      = 32;
  localparam int RIGHT_W     = 9;               // m
  localparam int THR_W       = 16;              // n
  localparam int FEAT_IDX_W  = NODE_W - THR_W - RIGHT_W;  // 7
  localparam int NODE_ADDR_W = RIGHT_W - 1;     // 8: address of a node inside its tree
  localparam int TREES       = 8;               // trees per NCU group
  localparam int TREE_SEL_W  = $clog2(TREES);   // 3
  localparam int RAM_ADDR_W  = TREE_SEL_W + NODE_ADDR_W;  // 11
  localparam int FEAT_ADDR_W = TREE_SEL_W + FEAT_IDX_W;   // 10
  localparam int FEAT_W      = THR_W;           // features and leaf values are n bits
  localparam int PERIOD      = 4;               // clock cycles per node
  localparam int PROB_W      = FEAT_W + TREE_SEL_W;       // sum of 8 leaf values

  typedef logic [FEAT_W-1:0]      feat_t;
  typedef logic [NODE_ADDR_W-1:0] node_addr_t;
  typedef logic [FEAT_ADDR_W-1:0] feat_addr_t;
  typedef logic [RAM_ADDR_W-1:0]  ram_addr_t;
  typedef logic [PROB_W-1:0]      prob_t;

  typedef struct packed {
    logic [FEAT_IDX_W-1:0]  feature_idx;
    logic [THR_W-1:0]       threshold;   // leaf_value when is_leaf
    logic                   is_leaf;     // sign bit of right_idx
    logic [NODE_ADDR_W-1:0] right_idx;
  } node_t;

  // Input SRAM read by each cascade layer: layer 0 reads input SRAM 0 directly, layer k
  // (k >= 1) gets its original features through layer buffer k from input SRAM
  // (k-1) mod n_sram, so with three scanning windows the layers cycle through SRAM 0, 1, 2.
  function automatic int sram_of_layer(int layer, int n_sram);
    return (layer == 0) ? 0 : (layer - 1) % n_sram;
  endfunction

  // Final result written to the output buffer.
  typedef struct packed {
    logic  cls;    // predicted class (mean >= 0.5)
    feat_t prob;   // mean positive-class fraction of the last layer
  } result_t;
endpackage
