// tb_pe: one PE (forest of 32 trees, 4 NCUs of 8 trees) against the software model.
//
// Each round loads 32 random trees, drives a random feature vector through per-NCU
// one-cycle feature ports and checks (a) the forest mean = (sum of the 32 leaf values)/32
// and (b) the latency: the slowest NCU needs 4 cycles per visited node, then the average
// takes 7 more edges and the done pulse one more, so done is seen 4*max+8 edges after
// start. Rounds with very unequal tree depths make the NCUs finish at different times.
module tb_pe;
  import df_pkg::*;
  import tb_df_pkg::*;
  localparam int NN = 4;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  logic       feat_rd [NN];
  feat_addr_t feat_addr [NN];
  feat_t      feature [NN];
  feat_t      mean;
  logic       done, busy, cfg_we = 0;
  logic [1:0] cfg_ncu = '0;
  ram_addr_t  cfg_addr = '0;
  logic [31:0] cfg_data = '0;

  pe dut (.clk, .rst_n, .start, .feat_rd, .feat_addr, .feature, .mean, .done, .busy,
          .cfg_we, .cfg_ncu, .cfg_addr, .cfg_data);

  logic [15:0] feat [1024];
  word_t trees [NN*8][256];
  int checks = 0, failures = 0, imbalance = 0;

  for (genvar i = 0; i < NN; i++) begin : g_fp
    always_ff @(posedge clk) if (feat_rd[i]) feature[i] <= feat[feat_addr[i]];
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int vis, cyc, maxv, minv;
    int ncu_vis [NN];
    longint sum;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int round = 0; round < 6; round++) begin
      for (int i = 0; i < 1024; i++) feat[i] = 16'($urandom_range(31));
      sum = 0;
      for (int n = 0; n < NN; n++) begin
        ncu_vis[n] = 0;
        for (int t = 0; t < 8; t++) begin
          automatic int md = (round % 2 != 0) ? ((n == 0) ? 8 : 2) : 8;   // odd rounds: NCU 0 much deeper
          void'(build_tree(trees[n*8+t], md, (round % 2 != 0) ? 0 : 30, 0, 127, 31));
          sum += longint'(eval_tree(trees[n*8+t], feat, t, vis));
          ncu_vis[n] += vis;
        end
      end
      maxv = 0; minv = 1 << 30;
      foreach (ncu_vis[n]) begin
        if (ncu_vis[n] > maxv) maxv = ncu_vis[n];
        if (ncu_vis[n] < minv) minv = ncu_vis[n];
      end
      if (maxv != minv) imbalance++;
      for (int n = 0; n < NN; n++)
        for (int t = 0; t < 8; t++)
          for (int a = 0; a < 256; a++) begin
            cfg_we = 1; cfg_ncu = 2'(n); cfg_addr = ram_addr_t'(t*256 + a); cfg_data = trees[n*8+t][a];
            @(posedge clk); #1;
          end
      cfg_we = 0;
      start = 1; @(posedge clk); #1 start = 0;
      cyc = 0;
      while (!done && cyc < 20000) begin @(posedge clk); #1 cyc++; end
      checks++;
      if (mean !== feat_t'(sum / 32)) begin failures++; $display("round %0d mean %0d expected %0d", round, mean, sum / 32); end
      checks++;
      if (cyc != 4*maxv + 8) begin failures++; $display("round %0d latency %0d expected %0d", round, cyc, 4*maxv + 8); end
      @(posedge clk); #1;
      checks++;
      if (done || busy) begin failures++; $display("done must be a single pulse"); end
    end
    checks++;
    if (imbalance == 0) begin failures++; $display("NCU imbalance never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
