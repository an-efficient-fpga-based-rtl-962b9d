// tb_df_top: end-to-end test of the whole accelerator at its default size (4 layers x
// 2 forests x 32 trees, 4 NCUs of 8 trees per forest).
//
// Random trees (up to 8 levels) are loaded through the configuration port. Samples are
// streamed in as three feature vectors (one per input SRAM); each result is compared with
// a software cascade: layer 0 sees input vector 0, layer k >= 1 sees input vector
// (k-1) mod 3 with feature indices 0 and 1 of every tree window replaced by the two
// forest means of layer k-1, each forest mean is the truncated average of its 32 leaf
// values and the output is the truncated mean of the last layer's two forests, class 1
// when at least one half. Periods with out_ready low fill the output buffer.
// The length of every pipeline epoch is checked against 4 cycles per node of the slowest
// NCU plus a fixed overhead of 11 cycles.
// The testbench counts how often each mechanism of the design happens and fails if one
// never does: output stall, input back-pressure, a full pipeline (all layers busy),
// pipeline bubbles (a layer left empty), class-vector reads in the layer buffers, and NCU
// imbalance (NCUs of one PE finishing at different times), and samples loaded with
// broadcast writes (every fourth sample is one vector shared by all SRAMs and windows).
module tb_df_top;
  import df_pkg::*;
  import tb_df_pkg::*;
  localparam int NL = 4, NP = 2, NT = 32, NSAMP = 40, FI_MAX = 15;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we = 0;
  logic [1:0] cfg_layer = '0;
  logic cfg_pe = 0;
  logic [1:0] cfg_ncu = '0;
  ram_addr_t cfg_addr = '0;
  logic [31:0] cfg_data = '0;
  logic in_valid = 0, in_ready, in_last = 0, in_bcast = 0;
  logic [1:0] in_sram = '0;
  feat_addr_t in_addr = '0;
  feat_t in_data = '0;
  logic out_valid, out_ready = 1, out_class;
  feat_t out_prob;
  logic [31:0] result_count;

  df_top dut (.clk, .rst_n, .cfg_we, .cfg_layer, .cfg_pe, .cfg_ncu, .cfg_addr, .cfg_data,
              .in_valid, .in_bcast, .in_ready, .in_sram, .in_addr, .in_data, .in_last,
              .out_valid, .out_ready, .out_prob, .out_class, .result_count);

  word_t trees [NL*NP*NT][256];
  logic [15:0] vec [3][1024];
  feat_t exp_prob [$];
  int checks = 0, failures = 0;
  int n_stall = 0, n_bp = 0, n_full = 0, n_bubble = 0, n_cvread = 0, n_imbal = 0, n_out = 0, n_bcast = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("%0t: %s", $time, msg); end
  endtask

  // software cascade for the vectors in vec
  int maxvis [NSAMP][NL];   // slowest NCU of each layer, in visited nodes, per sample

  function automatic feat_t model(int sid);
    logic [15:0] f [1024];
    feat_t cv [NP];
    int vis;
    int nv [NP*4];
    longint s;
    for (int k = 0; k < NL; k++) begin
      f = vec[sram_of_layer(k, 3)];
      if (k > 0)
        for (int w = 0; w < 8; w++) begin f[w*128] = cv[0]; f[w*128+1] = cv[1]; end
      for (int i = 0; i < NP*4; i++) nv[i] = 0;
      for (int p = 0; p < NP; p++) begin
        s = 0;
        for (int j = 0; j < NT; j++) begin
          s += longint'(eval_tree(trees[(k*NP+p)*NT+j], f, j % 8, vis));
          nv[p*4 + j/8] += vis;
        end
        cv[p] = feat_t'(s / longint'(NT));
      end
      maxvis[sid][k] = 0;
      foreach (nv[i]) if (nv[i] > maxvis[sid][k]) maxvis[sid][k] = nv[i];
    end
    return feat_t'((int'(cv[0]) + int'(cv[1])) / 2);
  endfunction

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired: results %0d out %0d state %0d valid %b%b%b%b waiting %0d occ %0d", result_count, n_out, dut.u_ctrl.state, dut.layer_valid[0], dut.layer_valid[1], dut.layer_valid[2], dut.layer_valid[3], dut.u_ctrl.waiting, dut.u_ctrl.occupied);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  always @(posedge clk) if (rst_n) begin
    bit all, any;
    if (dut.stall_out) n_stall++;
    if (in_valid && !in_ready) n_bp++;
    if (dut.adv) begin
      all = 1; any = 0;
      for (int k = 0; k < NL; k++) begin all &= dut.layer_valid[k]; any |= dut.layer_valid[k]; end
      if (all) n_full++;
      if (any && !all) n_bubble++;
    end
    for (int p = 0; p < NP*4; p++)
      if (dut.l_rd[1][p] && dut.l_addr[1][p][6:0] < 2) n_cvread++;
    if (dut.g_layer[0].u_layer.g_pe[0].u_pe.state == 2'd1) begin
      automatic bit d0 = dut.g_layer[0].u_layer.g_pe[0].u_pe.ncu_done[0];
      for (int i = 1; i < 4; i++)
        if (dut.g_layer[0].u_layer.g_pe[0].u_pe.ncu_done[i] != d0) begin n_imbal++; break; end
    end
  end

  // Epoch timing: the controller spends 4 cycles per node of the slowest NCU in any busy
  // layer plus 11 cycles of fixed overhead (start, average shifts, done pulse, handshake)
  // outside its idle state; one more idle cycle carries the advance.
  int pipe_id [NL];
  bit pipe_v [NL];
  int next_id = 0, epoch_cyc = 0, epoch_exp = 0, n_epochs = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.state != 2'd0) epoch_cyc++;
    else if (epoch_exp != 0) begin
      n_epochs++;
      check(epoch_cyc == epoch_exp, $sformatf("epoch took %0d cycles, expected %0d", epoch_cyc, epoch_exp));
      epoch_exp = 0;
    end
    if (dut.adv) begin
      for (int k = NL-1; k > 0; k--) begin pipe_v[k] = pipe_v[k-1]; pipe_id[k] = pipe_id[k-1]; end
      pipe_v[0] = dut.u_ctrl.take;
      if (dut.u_ctrl.take) begin pipe_id[0] = next_id; next_id++; end
      epoch_exp = 0;
      for (int k = 0; k < NL; k++)
        if (pipe_v[k] && 4*maxvis[pipe_id[k]][k] + 11 > epoch_exp) epoch_exp = 4*maxvis[pipe_id[k]][k] + 11;
      epoch_cyc = 0;
    end
  end

  // result checker
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    feat_t e;
    n_out++;
    if (exp_prob.size() == 0) check(0, "unexpected result");
    else begin
      e = exp_prob.pop_front();
      check(out_prob == e && out_class == e[15], $sformatf("result %0d: %0d/%0d expected %0d", n_out, out_prob, out_class, e));
    end
  end

  // output side: long pauses fill the output buffer
  initial begin
    @(posedge rst_n);
    forever begin
      repeat (6000) @(posedge clk);
      #1 out_ready = 0;
      repeat (25000) @(posedge clk);
      #1 out_ready = 1;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // trees
    for (int t = 0; t < NL*NP*NT; t++)
    begin
      void'(build_tree(trees[t], 8, (t % 3 == 0) ? 40 : 8, 0, FI_MAX, 1023));
      // nodes testing a class-vector entry get thresholds around the forest means (~0.5)
      for (int a = 0; a < 256; a++)
        if (!trees[t][a][8] && trees[t][a][31:25] < 2) trees[t][a][24:9] = 16'(29000 + $urandom_range(7500));
    end
    for (int t = 0; t < NL*NP*NT; t++) begin
      automatic int k = t / (NP*NT), p = (t / NT) % NP, j = t % NT;
      for (int a = 0; a < 256; a++) begin
        cfg_we = 1; cfg_layer = 2'(k); cfg_pe = p[0]; cfg_ncu = 2'(j / 8);
        cfg_addr = ram_addr_t'((j % 8) * 256 + a); cfg_data = trees[t][a];
        @(posedge clk); #1;
      end
    end
    cfg_we = 0;
    // samples: trees only use feature_idx 0..FI_MAX, so only those words are sent
    for (int s = 0; s < NSAMP; s++) begin
      for (int v = 0; v < 3; v++) for (int i = 0; i < 1024; i++) vec[v][i] = 16'($urandom_range(1023));
      if (s % 4 == 1) begin
        // one shared vector, sent once with broadcast writes
        for (int v = 0; v < 3; v++) for (int i = 0; i < 1024; i++) vec[v][i] = vec[0][i % 128];
        exp_prob.push_back(model(s));
        for (int i = 0; i <= FI_MAX; i++) begin
          in_valid = 1; in_bcast = 1; in_sram = 2'($urandom_range(2));
          in_addr = feat_addr_t'($urandom_range(7) * 128 + i); in_data = vec[0][i];
          in_last = (i == FI_MAX);
          @(posedge clk); #1;
          while (!dut.u_ctrl.accept) begin @(posedge clk); #1; end
        end
        n_bcast++;
      end else begin
        exp_prob.push_back(model(s));
        for (int v = 0; v < 3; v++)
          for (int w = 0; w < 8; w++)
            for (int i = 0; i <= FI_MAX; i++) begin
              in_valid = 1; in_sram = 2'(v); in_addr = feat_addr_t'(w*128 + i); in_data = vec[v][w*128+i];
              in_last = (v == 2 && w == 7 && i == FI_MAX);
              @(posedge clk); #1;
              while (!dut.u_ctrl.accept) begin @(posedge clk); #1; end
            end
      end
      in_valid = 0; in_last = 0; in_bcast = 0;
      if (s % 10 == 9) repeat (3000) @(posedge clk);   // let the pipeline drain
      #1;
    end
    while (n_out < NSAMP) @(posedge clk);
    repeat (10) @(posedge clk);
    check(result_count == NSAMP && exp_prob.size() == 0, "result count");
    check(n_stall > 0, "output stall never happened");
    check(n_bp > 0, "input back-pressure never happened");
    check(n_full > 0, "pipeline never full");
    check(n_bubble > 0, "no pipeline bubble");
    check(n_cvread > 0, "class vector never read by a later layer");
    check(n_imbal > 0, "NCU imbalance never seen");
    check(n_epochs > 0, "no epoch timed");
    check(n_bcast > 0, "no broadcast-loaded sample");
    $display("epochs timed %0d", n_epochs);
    $display("results %0d stall %0d backpressure %0d full %0d bubble %0d cvreads %0d imbalance %0d broadcast %0d",
             n_out, n_stall, n_bp, n_full, n_bubble, n_cvread, n_imbal, n_bcast);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
