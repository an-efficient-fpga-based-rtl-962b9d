// tb_average: checks the forest average. Random NCU sums are loaded; the mean must equal
// the sum of the 4 NCU inputs (32 trees) divided by 32 (truncated) and valid must rise 6 clock edges
// after the edge that samples start (load plus 5 one-bit shifts).
module tb_average;
  import df_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  prob_t pt [4];
  feat_t mean;
  logic valid;
  int checks = 0, failures = 0;

  average dut (.clk, .rst_n, .start, .prob_total(pt), .mean, .valid);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint s;
    int cyc;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int r = 0; r < 500; r++) begin
      s = 0;
      for (int i = 0; i < 4; i++) begin
        pt[i] = (r % 5 == 0) ? prob_t'(8 * 65535) : prob_t'($urandom_range(8 * 65535));
        s += longint'(pt[i]);
      end
      start = 1; @(posedge clk); #1 start = 0;
      for (int i = 0; i < 4; i++) pt[i] = prob_t'($urandom);  // inputs may change after start
      cyc = 0;
      while (!valid && cyc < 50) begin @(posedge clk); #1 cyc++; end
      checks++;
      if (mean !== feat_t'(s / 32)) begin failures++; $display("mean %0d expected %0d", mean, s / 32); end
      checks++;
      if (cyc != 6) begin failures++; $display("latency %0d expected 6", cyc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
