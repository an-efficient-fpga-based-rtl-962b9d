// ncu: node computing unit. Traverses the TREES trees of its group one after another and
// accumulates their leaf values.
//
// Each visited node takes one period of 4 clock cycles; the phase comes from the paired
// update module, which also holds currentnode_idx:
//   phase 0  read the nodes RAM at {finish_count, currentnode_idx}
//   phase 1  node word available: threshold is registered (threshold_reg) and the feature
//            at {finish_count, feature_idx} is requested from the feature port
//   phase 2  feature available: the comparator (feature <= threshold_reg) drives the
//            multiplexer choosing left_idx = currentnode_idx + 1 or right_idx, and the
//            result is registered as nextnode_idx
//   phase 3  update loads currentnode_idx; for a leaf (sign bit of right_idx set) finish
//            is raised, leaf_value is added to prob_total and the tree counter
//            (finish_count) advances, so the next period starts the next tree at its root.
// When finish_count reaches TREES, done goes high and stays high until the next start.
// The datapath (RAM, threshold register, comparator, +1 adder, multiplexer, counter,
// leaf accumulator) follows the paper's NCU; the split of the work between the four
// cycles, the "<=" goes-left convention and the separate feature port are this design's
// choices. A tree that is a single leaf costs one period.
//
// Interface: start is a one-cycle pulse (give the same pulse to the update module).
// feature must be the value at feat_addr one cycle after feat_rd. done is high
// 4*(nodes visited) clock edges after the edge that samples start.
module ncu
  import df_pkg::*;
#(
  parameter int N_TREES = TREES
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  // update module
  input  logic [1:0]  phase,
  input  node_addr_t  currentnode_idx,
  output node_addr_t  nextnode_idx,
  output logic        finish,
  output logic        busy,
  // feature port
  output logic        feat_rd,
  output feat_addr_t  feat_addr,
  input  feat_t       feature,
  // results
  output prob_t       prob_total,
  output logic        done,
  // nodes RAM loading
  input  logic        cfg_we,
  input  ram_addr_t   cfg_addr,
  input  logic [NODE_W-1:0] cfg_data
);
  localparam int CNT_W = $clog2(N_TREES + 1);

  logic [CNT_W-1:0]      finish_count;
  logic [TREE_SEL_W-1:0] tree_sel;
  logic [NODE_W-1:0]     ram_q;
  node_t                 node;
  feat_t                 threshold_reg;
  node_addr_t            left_idx;
  logic                  le;

  assign tree_sel = finish_count[TREE_SEL_W-1:0];
  assign busy     = (finish_count != CNT_W'(N_TREES));
  assign done     = !busy;

  node_ram u_nodes (
    .clk     (clk),
    .rd_en   (busy && phase == 2'd0),
    .rd_addr ({tree_sel, currentnode_idx}),
    .rd_data (ram_q),
    .wr_en   (cfg_we),
    .wr_addr (cfg_addr),
    .wr_data (cfg_data)
  );

  assign node      = node_t'(ram_q);
  assign feat_rd   = busy && phase == 2'd1 && !node.is_leaf;
  assign feat_addr = {tree_sel, node.feature_idx};
  assign left_idx  = currentnode_idx + 1'b1;
  assign le        = (feature <= threshold_reg);   // comparator, combinational
  assign finish    = busy && phase == 2'd3 && node.is_leaf;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      finish_count  <= CNT_W'(N_TREES);
      prob_total    <= '0;
      threshold_reg <= '0;
      nextnode_idx  <= '0;
    end else if (start) begin
      finish_count  <= '0;
      prob_total    <= '0;
    end else if (busy) begin
      if (phase == 2'd1) threshold_reg <= node.threshold;
      if (phase == 2'd2) nextnode_idx  <= le ? left_idx : node.right_idx;
      if (finish) begin
        prob_total   <= prob_total + prob_t'(node.threshold);
        finish_count <= finish_count + 1'b1;
      end
    end
  end
endmodule
