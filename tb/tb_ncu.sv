// tb_ncu: self-checking testbench of one NCU with its update module.
//
// Loads 8 random trees into the nodes RAM, presents a random feature vector through a
// one-cycle-latency feature port and checks prob_total against the software sum of the 8
// leaf values, and the cycle count against 4 cycles per visited node (counted from
// the clock edge that samples start). Small feature and threshold ranges make feature == threshold common, so the
// "<=" comparison is exercised. Several rounds use different trees and depths, including
// trees that are a single leaf.
module tb_ncu;
  import df_pkg::*;
  import tb_df_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  logic [1:0] phase;
  node_addr_t cur, nxt;
  logic fin, busy, feat_rd, done, cfg_we = 0;
  feat_addr_t feat_addr;
  feat_t feature;
  prob_t prob_total;
  ram_addr_t cfg_addr = '0;
  logic [31:0] cfg_data = '0;

  update u_upd (.clk, .rst_n, .start, .run(busy), .nextnode_idx(nxt), .finish(fin),
                .currentnode_idx(cur), .phase);
  ncu dut (.clk, .rst_n, .start, .phase, .currentnode_idx(cur), .nextnode_idx(nxt), .finish(fin),
           .busy, .feat_rd, .feat_addr, .feature, .prob_total, .done,
           .cfg_we, .cfg_addr, .cfg_data);

  logic [15:0] feat [1024];
  word_t trees [8][256];
  int checks = 0, failures = 0;

  always_ff @(posedge clk) if (feat_rd) feature <= feat[feat_addr];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, vis, tot_vis, cyc;
    logic [18:0] exp_sum;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int round = 0; round < 12; round++) begin
      automatic int maxd = (round % 4 == 0) ? 8 : 1 + ((round + 7) % 8);
      for (int i = 0; i < 1024; i++) feat[i] = 16'($urandom_range(15));
      exp_sum = '0;
      tot_vis = 0;
      for (int t = 0; t < 8; t++) begin
        n = build_tree(trees[t], (round > 8) ? 1 + $urandom_range(7) : maxd, 25, 0, 127, 15);
        exp_sum += 19'(eval_tree(trees[t], feat, t, vis));
        tot_vis += vis;
      end
      // load RAM
      for (int t = 0; t < 8; t++)
        for (int a = 0; a < 256; a++) begin
          cfg_we <= 1; cfg_addr <= ram_addr_t'(t*256 + a); cfg_data <= trees[t][a];
          @(posedge clk);
        end
      cfg_we <= 0;
      @(posedge clk);
      start <= 1; @(posedge clk); #1 start <= 0;
      cyc = 0;
      while (!done) begin @(posedge clk); #1 cyc++; end
      checks++;
      if (prob_total !== exp_sum) begin
        failures++; $display("round %0d: prob_total %0d expected %0d", round, prob_total, exp_sum);
      end
      checks++;
      if (cyc != 4*tot_vis) begin
        failures++; $display("round %0d: %0d cycles, expected %0d", round, cyc, 4*tot_vis);
      end
      repeat (3) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
