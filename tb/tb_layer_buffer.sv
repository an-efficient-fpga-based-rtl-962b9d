// tb_layer_buffer: loads random class vectors and slots, issues random reads on all ports
// and checks that indices 0 and 1 of every tree window return the class vector, that all
// other reads are forwarded to the input SRAM with the loaded slot and the same address,
// and that the SRAM answer is passed through one cycle later. The testbench plays the
// input SRAM with a one-cycle registered read of a computed pattern.
module tb_layer_buffer;
  import df_pkg::*;
  localparam int NPt = 8;
  logic clk = 0, rst_n = 0, load = 0;
  always #5 clk = ~clk;
  feat_t cv_in [2];
  logic [2:0] slot_in = '0;
  logic feat_rd [NPt];
  feat_addr_t feat_addr [NPt];
  feat_t feature [NPt];
  logic sram_rd [NPt];
  logic [2:0] sram_slot [NPt];
  feat_addr_t sram_addr [NPt];
  feat_t sram_data [NPt];
  int checks = 0, failures = 0, cv_hits = 0, sram_hits = 0;

  layer_buffer dut (.clk, .rst_n, .load, .cv_in, .slot_in, .feat_rd, .feat_addr, .feature,
                    .sram_rd, .sram_slot, .sram_addr, .sram_data);

  function automatic feat_t pattern(logic [2:0] s, feat_addr_t a);
    return feat_t'((32'(s) * 40503 + 32'(a) * 2654435) >> 4);
  endfunction

  for (genvar p = 0; p < NPt; p++) begin : g_sram
    always_ff @(posedge clk) if (sram_rd[p]) sram_data[p] <= pattern(sram_slot[p], sram_addr[p]);
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    feat_t cv [2];
    logic [2:0] slot;
    feat_t expv [NPt];
    for (int p = 0; p < NPt; p++) begin feat_rd[p] = 0; feat_addr[p] = '0; end
    cv_in[0] = '0; cv_in[1] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int r = 0; r < 200; r++) begin
      cv_in[0] = feat_t'($urandom); cv_in[1] = feat_t'($urandom); slot_in = 3'($urandom_range(4));
      cv = cv_in; slot = slot_in;
      load = 1; @(posedge clk); #1 load = 0;
      cv_in[0] = feat_t'($urandom); cv_in[1] = feat_t'($urandom); slot_in = 3'($urandom_range(4));
      for (int i = 0; i < 10; i++) begin
        for (int p = 0; p < NPt; p++) begin
          feat_rd[p] = 1;
          feat_addr[p] = {3'($urandom), ($urandom_range(3) == 0) ? 7'($urandom_range(1)) : 7'($urandom)};
          if (feat_addr[p][6:0] < 2) begin expv[p] = cv[feat_addr[p][0]]; cv_hits++; end
          else begin expv[p] = pattern(slot, feat_addr[p]); sram_hits++; end
        end
        @(posedge clk); #1;
        for (int p = 0; p < NPt; p++) begin
          feat_rd[p] = 0;
          checks++;
          if (feature[p] !== expv[p]) begin failures++; $display("port %0d: %h expected %h", p, feature[p], expv[p]); end
        end
      end
    end
    checks++;
    if (cv_hits == 0 || sram_hits == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
