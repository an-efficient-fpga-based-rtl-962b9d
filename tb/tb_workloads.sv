// tb_workloads: the two evaluated model shapes on the accelerator, checked end to end.
//
//   ADULT-like: 4 layers x 2 forests x 32 trees, no multi-grained scanning, 14 features
//     (the UCI ADULT attribute count), one vector loaded with broadcast writes. Default df_top.
//   Face-mask-like: 3 layers x 2 forests x 32 trees, three different scanning vectors of
//     32 features per tree window (the real scanned vectors' length is not known here).
//     df_top with N_LAYERS = 3.
// Trees are random (up to 8 levels); every result is compared with the software cascade,
// and the steady-state cycles per result are printed. With one input word per cycle the
// face-mask shape is limited by the input stream (3 x 8 x 32 words per sample).
module tb_workloads;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int c0, f0, c1, f1;
  bit d0, d1;
  int checks, failures;

  wl_runner #(.N_LAYERS(4), .N_FEAT(14), .SAME_VEC(1'b1), .NAME("adult"))
    u_adult (.clk, .rst_n, .checks(c0), .failures(f0), .finished(d0));
  wl_runner #(.N_LAYERS(3), .N_FEAT(32), .SAME_VEC(1'b0), .NAME("facemask"))
    u_mask  (.clk, .rst_n, .checks(c1), .failures(f1), .finished(d1));

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    wait (d0 && d1);
    checks = c0 + c1; failures = f0 + f1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
    $finish;
  end
endmodule
