// tb_node_ram: checks the nodes RAM. Random words are written to random addresses, read
// back with one cycle latency, and the read data must hold while rd_en is low even when
// other words are written.
module tb_node_ram;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rd_en = 0, wr_en = 0;
  logic [10:0] rd_addr = '0, wr_addr = '0;
  logic [31:0] rd_data, wr_data = '0;
  logic [31:0] model [2048];
  bit          written [2048];
  int checks = 0, failures = 0;

  node_ram dut (.clk, .rd_en, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] held;
    int a;
    for (int i = 0; i < 2048; i++) begin
      wr_en <= 1; wr_addr <= 11'(i); wr_data <= $urandom; 
      @(posedge clk); #1 model[i] = wr_data; written[i] = 1;
    end
    for (int i = 0; i < 3000; i++) begin
      a = $urandom_range(2047);
      wr_en <= ($urandom_range(1) == 1); wr_addr <= 11'($urandom_range(2047)); wr_data <= $urandom;
      rd_en <= 1; rd_addr <= 11'(a);
      @(posedge clk); #1;
      // read sees the old contents when the same word is written in the same cycle
      checks++;
      if (rd_data !== model[a]) begin failures++; $display("addr %0d: %h vs %h", a, rd_data, model[a]); end
      if (wr_en) model[wr_addr] = wr_data;
      held = rd_data;
      rd_en <= 0; rd_addr <= 11'(a + 1); wr_en <= 1; wr_addr <= 11'(a); wr_data <= ~held;
      @(posedge clk); #1;
      model[a] = ~held;
      checks++;
      if (rd_data !== held) begin failures++; $display("read data not held"); end
      wr_en <= 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
