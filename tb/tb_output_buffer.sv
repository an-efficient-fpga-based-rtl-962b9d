// tb_output_buffer: random pushes (only when not full, as the controller does) and random
// out_ready; data must leave in order, full must be high exactly at 16 entries and
// out_valid exactly when entries are present.
module tb_output_buffer;
  import df_pkg::*;
  logic clk = 0, rst_n = 0, push = 0, out_ready = 0;
  always #5 clk = ~clk;
  result_t din = '0, dout;
  logic full, out_valid;
  result_t q [$];
  int checks = 0, failures = 0, fulls = 0;

  output_buffer dut (.clk, .rst_n, .push, .din, .full, .out_valid, .out_ready, .out_data(dout));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pp;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 6000; i++) begin
      pp = ((i / 1000) % 2 != 0) ? 80 : 30;   // phases that fill and drain the FIFO
      checks++;
      if (full !== (q.size() == 16) || out_valid !== (q.size() != 0)) begin
        failures++; $display("flags wrong: full %0d valid %0d size %0d", full, out_valid, q.size());
      end
      if (full) fulls++;
      push = !full && ($urandom_range(99) < pp);
      din = result_t'($urandom);
      out_ready = ($urandom_range(99) < 50);
      if (out_valid && out_ready) begin
        checks++;
        if (dout !== q[0]) begin failures++; $display("data %h expected %h", dout, q[0]); end
        void'(q.pop_front());
      end
      if (push) q.push_back(din);
      @(posedge clk); #1;
    end
    checks++;
    if (fulls == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
