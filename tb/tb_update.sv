// tb_update: checks the update module. The phase must count 0,1,2,3 while run is high and
// hold while it is low; currentnode_idx must take nextnode_idx at the end of phase 3,
// take 0 when finish is high there, and return to 0/phase 0 on start.
module tb_update;
  logic clk = 0, rst_n = 0, start = 0, run = 0, finish = 0;
  always #5 clk = ~clk;
  logic [7:0] nxt = '0, cur;
  logic [1:0] phase;
  int checks = 0, failures = 0;

  update dut (.clk, .rst_n, .start, .run, .nextnode_idx(nxt), .finish, .currentnode_idx(cur), .phase);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] mph;
    logic [7:0] mcur;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    mph = 0; mcur = 0;
    for (int i = 0; i < 5000; i++) begin
      start  = ($urandom_range(99) < 3);
      run    = ($urandom_range(99) < 85);
      finish = ($urandom_range(99) < 30);
      nxt    = 8'($urandom);
      @(posedge clk); #1;
      if (start) begin mph = 0; mcur = 0; end
      else if (run) begin
        if (mph == 3) mcur = finish ? 8'd0 : nxt;
        mph = mph + 1'b1;
      end
      checks++;
      if (phase !== mph || cur !== mcur) begin
        failures++;
        $display("cycle %0d: phase %0d/%0d cur %0d/%0d", i, phase, mph, cur, mcur);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
