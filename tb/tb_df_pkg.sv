// tb_df_pkg: reference model and stimulus helpers for the deep-forest testbenches.
//
// build_tree writes a random binary decision tree in pre-order into a 256-word region in
// the 32-bit node format ([31:25] feature_idx, [24:9] threshold or leaf value, [8] leaf
// flag, [7:0] right-child address; the left child is the next word). eval_tree walks a
// tree in software for a given feature vector (1024 entries, addressed {tree window,
// feature_idx}) and returns the leaf value and the number of nodes visited. Neither uses
// the RTL, so the testbenches compare the hardware against an independent model.
package tb_df_pkg;
  typedef logic [31:0] word_t;

  function automatic word_t leaf_word(logic [15:0] v);
    return {7'd0, v, 1'b1, 8'd0};
  endfunction

  // Builds a tree with at most max_depth levels (max_depth <= 8). leaf_pct is the chance
  // (percent) that a non-root node above the last level becomes a leaf. Feature indices
  // are drawn from [fi_lo, fi_hi], thresholds from [0, thr_max]. Returns the node count.
  function automatic int build_tree(ref word_t t [256], input int max_depth, input int leaf_pct,
                                    input int fi_lo, input int fi_hi, input int thr_max);
    int stk_pos [16];
    int stk_dep [16];
    int sp = 0;
    int p = 0;
    int d = 0;
    for (int i = 0; i < 256; i++) t[i] = '0;
    forever begin
      bit leaf = (d >= max_depth - 1) || (d > 0 && int'($urandom_range(99)) < leaf_pct);
      if (leaf) begin
        t[p] = leaf_word(16'($urandom));
        p++;
        if (sp == 0) break;
        sp--;
        t[stk_pos[sp]][7:0] = 8'(p);      // right child follows the left subtree
        d = stk_dep[sp];
      end else begin
        t[p] = {7'($urandom_range(fi_hi, fi_lo)), 16'($urandom_range(thr_max)), 1'b0, 8'd0};
        stk_pos[sp] = p;
        stk_dep[sp] = d + 1;
        sp++;
        p++;
        d++;
      end
    end
    return p;
  endfunction

  // Software traversal: left when feature <= threshold.
  function automatic logic [15:0] eval_tree(ref word_t t [256], ref logic [15:0] feat [1024],
                                            input int window, output int visited);
    int a = 0;
    visited = 0;
    forever begin
      word_t w = t[a];
      visited++;
      if (w[8]) return w[24:9];
      if (feat[{window[2:0], w[31:25]}] <= w[24:9]) a = a + 1;
      else a = int'(w[7:0]);
    end
  endfunction
endpackage
