// tb_cascade_layer: one cascade layer (2 forests x 32 trees) against the software model.
// Checks both class-vector registers, that done drops while the PEs work and returns when
// both have finished, and that the registers keep the previous sample's class vector
// until the new results arrive (the end-of-layer pipeline register).
module tb_cascade_layer;
  import df_pkg::*;
  import tb_df_pkg::*;
  localparam int NP = 2, NN = 4, NPORT = NP*NN;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  logic       feat_rd [NPORT];
  feat_addr_t feat_addr [NPORT];
  feat_t      feature [NPORT];
  feat_t      cvec [NP];
  logic       done, cfg_we = 0;
  logic       cfg_pe = 0;
  logic [1:0] cfg_ncu = '0;
  ram_addr_t  cfg_addr = '0;
  logic [31:0] cfg_data = '0;

  cascade_layer dut (.clk, .rst_n, .start, .feat_rd, .feat_addr, .feature, .class_vec(cvec), .done,
                     .cfg_we, .cfg_pe, .cfg_ncu, .cfg_addr, .cfg_data);

  logic [15:0] feat [1024];
  word_t trees [NP*NN*8][256];
  int checks = 0, failures = 0;

  for (genvar i = 0; i < NPORT; i++) begin : g_fp
    always_ff @(posedge clk) if (feat_rd[i]) feature[i] <= feat[feat_addr[i]];
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int vis, cyc;
    longint sum [NP];
    feat_t prev [NP];
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      for (int i = 0; i < 1024; i++) feat[i] = 16'($urandom_range(255));
      for (int p = 0; p < NP; p++) begin
        sum[p] = 0;
        for (int j = 0; j < NN*8; j++) begin
          void'(build_tree(trees[p*32+j], 1 + $urandom_range(7), 20, 0, 127, 255));
          sum[p] += longint'(eval_tree(trees[p*32+j], feat, j % 8, vis));
        end
      end
      for (int p = 0; p < NP; p++)
        for (int j = 0; j < NN*8; j++)
          for (int a = 0; a < 256; a++) begin
            cfg_we = 1; cfg_pe = p[0]; cfg_ncu = 2'(j / 8); cfg_addr = ram_addr_t'((j % 8)*256 + a);
            cfg_data = trees[p*32+j][a];
            @(posedge clk); #1;
          end
      cfg_we = 0;
      prev = cvec;
      start = 1; @(posedge clk); #1 start = 0;
      checks++;
      if (done) begin failures++; $display("done still high after start"); end
      checks++;
      if (cvec != prev) begin failures++; $display("class vector changed before the PEs finished"); end
      cyc = 0;
      while (!done && cyc < 20000) begin @(posedge clk); #1 cyc++; end
      for (int p = 0; p < NP; p++) begin
        checks++;
        if (cvec[p] !== feat_t'(sum[p] / 32)) begin
          failures++; $display("round %0d forest %0d: %0d expected %0d", round, p, cvec[p], sum[p] / 32);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

