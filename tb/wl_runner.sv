// wl_runner: runs one deep-forest model on its own df_top instance and checks every result
// against the software cascade (see tb_df_pkg). Used by tb_workloads.
//
// N_LAYERS: cascade depth. N_FEAT: original features per tree window (placed at
// feature_idx 2..N_FEAT+1, indices 0 and 1 being the class-vector slots of layers >= 1).
// SAME_VEC: 1 = one feature vector shared by all input SRAMs and tree windows (no
// multi-grained scanning), sent once with broadcast writes; 0 = three different scanning
// vectors, sent window by window. Trees have up to 8 levels. The
// output side is always ready, so after the first samples the rate is set by the epoch
// length or by the input stream, whichever is slower; the runner reports the mean
// number of cycles between results and the mean epoch length when no layer waits for
// input (cycles outside the controller's idle state per epoch, plus the advance cycle).
module wl_runner #(
  parameter int    N_LAYERS = 4,
  parameter int    N_FEAT   = 14,
  parameter bit    SAME_VEC = 1'b1,
  parameter int    NSAMP    = 12,
  parameter string NAME     = "model"
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output bit   finished
);
  import df_pkg::*;
  import tb_df_pkg::*;
  localparam int NP = 2, NT = 32, LW = $clog2(N_LAYERS);

  logic cfg_we = 0;
  logic [LW-1:0] cfg_layer = '0;
  logic cfg_pe = 0;
  logic [1:0] cfg_ncu = '0;
  ram_addr_t cfg_addr = '0;
  logic [31:0] cfg_data = '0;
  logic in_valid = 0, in_ready, in_last = 0, in_bcast = 0;
  logic [1:0] in_sram = '0;
  feat_addr_t in_addr = '0;
  feat_t in_data = '0;
  logic out_valid, out_class;
  feat_t out_prob;
  logic [31:0] result_count;

  df_top #(.N_LAYERS(N_LAYERS)) dut (
    .clk, .rst_n, .cfg_we, .cfg_layer, .cfg_pe, .cfg_ncu, .cfg_addr, .cfg_data,
    .in_valid, .in_bcast, .in_ready, .in_sram, .in_addr, .in_data, .in_last,
    .out_valid, .out_ready(1'b1), .out_prob, .out_class, .result_count);

  word_t trees [N_LAYERS*NP*NT][256];
  logic [15:0] vec [3][1024];
  feat_t exp_prob [$];
  int n_out = 0;
  longint t_first = 0, t_last = 0, cyc = 0, n_busy = 0, n_adv = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("%s: %0t: %s", NAME, $time, msg); end
  endtask

  function automatic feat_t model();
    logic [15:0] f [1024];
    feat_t cv [NP];
    int vis;
    longint s;
    for (int k = 0; k < N_LAYERS; k++) begin
      f = vec[sram_of_layer(k, 3)];
      if (k > 0)
        for (int w = 0; w < 8; w++) begin f[w*128] = cv[0]; f[w*128+1] = cv[1]; end
      for (int p = 0; p < NP; p++) begin
        s = 0;
        for (int j = 0; j < NT; j++) s += longint'(eval_tree(trees[(k*NP+p)*NT+j], f, j % 8, vis));
        cv[p] = feat_t'(s / longint'(NT));
      end
    end
    return feat_t'((int'(cv[0]) + int'(cv[1])) / 2);
  endfunction

  always @(posedge clk) begin
    cyc++;
    if (rst_n && int'(dut.u_ctrl.state) != 0) n_busy++;
    if (rst_n && dut.u_ctrl.adv) n_adv++;
    if (rst_n && out_valid) begin
      feat_t e;
      n_out++;
      if (n_out == 2) t_first = cyc;
      t_last = cyc;
      if (exp_prob.size() == 0) check(0, "unexpected result");
      else begin
        e = exp_prob.pop_front();
        check(out_prob == e && out_class == e[15], $sformatf("result %0d: %0d expected %0d", n_out, out_prob, e));
      end
    end
  end

  initial begin
    checks = 0; failures = 0; finished = 0;
    @(posedge rst_n);
    @(posedge clk); #1;
    for (int t = 0; t < N_LAYERS*NP*NT; t++) begin
      // layer 0 reads only original features (2..N_FEAT+1); later layers also the class vector
      automatic int lo = (t < NP*NT) ? 2 : 0;
      void'(build_tree(trees[t], 8, 10, lo, N_FEAT + 1, 1023));
      for (int a = 0; a < 256; a++)
        if (!trees[t][a][8] && trees[t][a][31:25] < 2) trees[t][a][24:9] = 16'(29000 + $urandom_range(7500));
    end
    for (int t = 0; t < N_LAYERS*NP*NT; t++) begin
      automatic int k = t / (NP*NT), p = (t / NT) % NP, j = t % NT;
      for (int a = 0; a < 256; a++) begin
        cfg_we = 1; cfg_layer = LW'(k); cfg_pe = p[0]; cfg_ncu = 2'(j / 8);
        cfg_addr = ram_addr_t'((j % 8) * 256 + a); cfg_data = trees[t][a];
        @(posedge clk); #1;
      end
    end
    cfg_we = 0;
    for (int s = 0; s < NSAMP; s++) begin
      for (int v = 0; v < 3; v++)
        for (int i = 0; i < 1024; i++) vec[v][i] = (SAME_VEC && v > 0) ? vec[0][i] : 16'($urandom_range(1023));
      // the same features appear in every tree window
      for (int v = 0; v < 3; v++)
        for (int w = 1; w < 8; w++)
          for (int i = 0; i < 128; i++) vec[v][w*128+i] = vec[v][i];
      exp_prob.push_back(model());
      if (SAME_VEC)
        for (int i = 2; i < N_FEAT + 2; i++) begin
          in_valid = 1; in_bcast = 1; in_sram = '0; in_addr = feat_addr_t'(i); in_data = vec[0][i];
          in_last = (i == N_FEAT + 1);
          @(posedge clk); #1;
          while (!dut.u_ctrl.accept) begin @(posedge clk); #1; end
        end
      else
        for (int v = 0; v < 3; v++)
          for (int w = 0; w < 8; w++)
            for (int i = 2; i < N_FEAT + 2; i++) begin
              in_valid = 1; in_sram = 2'(v); in_addr = feat_addr_t'(w*128 + i); in_data = vec[v][w*128+i];
              in_last = (v == 2 && w == 7 && i == N_FEAT + 1);
              @(posedge clk); #1;
              while (!dut.u_ctrl.accept) begin @(posedge clk); #1; end
            end
      in_valid = 0; in_last = 0; in_bcast = 0;
    end
    while (n_out < NSAMP) @(posedge clk);
    check(result_count == NSAMP && exp_prob.size() == 0, "result count");
    $display("%s: %0d layers, %0d features/window, %0d results, %0d cycles per result in steady state, epoch without input waits %0d cycles",
             NAME, N_LAYERS, N_FEAT, n_out, int'(t_last - t_first) / (NSAMP - 2), int'(n_busy / n_adv) + 1);
    finished = 1;
  end
endmodule
