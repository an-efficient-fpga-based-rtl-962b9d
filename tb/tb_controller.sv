// tb_controller: the controller with behavioural layers and a random DRAM-side stream.
//
// Each modelled layer stays busy for a random number of cycles after layer_start. The
// testbench keeps its own model of the pipeline (which sample sits in which layer) and
// checks: samples are written into the free slot in arrival order, layer k is started
// on the sample that layer k-1 held in the previous epoch, no advance happens while a
// started layer is still busy, a result is pushed exactly when a sample leaves the last
// layer, nothing is pushed into a full output buffer, and result_count matches. It also
// requires that input back-pressure (in_ready low) and the output stall both occurred.
module tb_controller;
  localparam int NL = 4, SL = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, in_last = 0;
  logic [1:0] in_sram = '0;
  logic in_bcast = 0;
  logic [9:0] in_addr = '0;
  logic [15:0] in_data = '0;
  logic wr_en, wr_bcast; logic [1:0] wr_sram; logic [2:0] wr_slot; logic [9:0] wr_addr; logic [15:0] wr_data;
  logic layer_done [NL], layer_start [NL], layer_valid [NL];
  logic [2:0] layer_slot [NL];
  logic adv, buf_load, out_full = 0, out_push, stall_out;
  logic [31:0] result_count;

  controller dut (.clk, .rst_n, .in_valid, .in_ready, .in_sram, .in_addr, .in_data, .in_last, .in_bcast,
                  .wr_en, .wr_bcast, .wr_sram, .wr_slot, .wr_addr, .wr_data,
                  .layer_done, .layer_start, .layer_valid, .layer_slot, .adv, .buf_load,
                  .out_full, .out_push, .result_count, .stall_out);

  int checks = 0, failures = 0;
  int busy_cnt [NL];
  int n_bp = 0, n_stall = 0, n_full_pipe = 0, pushed = 0, loaded = 0;
  // model
  int m_slot [NL];
  bit m_valid [NL];
  int free_slot = 0, head_slot = 0;
  int waiting [$];

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("%0t: %s", $time, msg); end
  endtask

  // behavioural layers
  for (genvar k = 0; k < NL; k++) begin : g_l
    always_ff @(posedge clk) begin
      if (layer_start[k]) busy_cnt[k] <= 3 + int'($urandom_range(40));
      else if (busy_cnt[k] > 0) busy_cnt[k] <= busy_cnt[k] - 1;
    end
    assign layer_done[k] = (busy_cnt[k] == 0) && !layer_start[k];
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor
  always @(posedge clk) if (rst_n) begin
    if (in_valid && !in_ready) n_bp++;
    if (stall_out) n_stall++;
    if (out_push) check(!out_full, "push into full output buffer");
    if (adv) begin
      for (int k = 0; k < NL; k++)
        if (m_valid[k]) check(busy_cnt[k] == 0, "advance while a layer is busy");
      check(out_push == m_valid[NL-1], "push does not match a sample leaving");
      if (out_push) pushed++;
      for (int k = NL-1; k > 0; k--) begin m_valid[k] = m_valid[k-1]; m_slot[k] = m_slot[k-1]; end
      m_valid[0] = (waiting.size() != 0);
      if (m_valid[0]) m_slot[0] = waiting.pop_front();
      if (m_valid[0] && m_valid[1] && m_valid[2] && m_valid[3]) n_full_pipe++;
    end else begin
      check(!out_push, "push without advance");
    end
    // a sample completed in this cycle can be taken only at a later advance
    if (wr_en) begin
      check(wr_slot == 3'(free_slot) && wr_addr == in_addr && wr_data == in_data && wr_sram == in_sram && wr_bcast == in_bcast,
            "write not passed to the free slot");
      if (in_last) begin waiting.push_back(free_slot); free_slot = (free_slot + 1) % SL; loaded++; end
    end
    for (int k = 0; k < NL; k++)
      if (layer_start[k]) check(m_valid[k] && layer_slot[k] == 3'(m_slot[k]), "layer started on wrong sample");
  end

  initial begin
    for (int k = 0; k < NL; k++) begin m_valid[k] = 0; m_slot[k] = 0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int s = 0; s < 60; s++) begin
      automatic int words = 1 + $urandom_range(30);
      for (int w = 0; w < words; w++) begin
        in_valid = 1; in_sram = 2'($urandom_range(2)); in_bcast = ($urandom_range(3) == 0); in_addr = 10'($urandom); in_data = 16'($urandom);
        in_last = (w == words - 1);
        @(posedge clk); #1;
        while (!dut.accept) begin @(posedge clk); #1; end
      end
      in_valid = 0; in_last = 0;
      if (s > 40) repeat ($urandom_range(200)) @(posedge clk);   // starve the pipeline
      #1;
    end
    repeat (2000) @(posedge clk);
    #1;
    check(pushed == loaded && result_count == 32'(loaded), "not every sample produced a result");
    check(n_bp > 0, "input back-pressure never happened");
    check(n_stall > 0, "output stall never happened");
    check(n_full_pipe > 0, "pipeline never full");
    $display("samples %0d results %0d backpressure %0d stalls %0d fullpipe %0d", loaded, pushed, n_bp, n_stall, n_full_pipe);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output buffer model: full for a while now and then
  initial begin
    forever begin
      repeat (300) @(posedge clk);
      #1 out_full = 1;
      repeat (120) @(posedge clk);
      #1 out_full = 0;
    end
  end
endmodule
