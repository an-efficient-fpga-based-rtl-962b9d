// tb_input_buffer: fills the three input SRAMs (5 slots each) with random words, then
// reads random addresses through all read ports of all four layer groups and checks the
// data one cycle later against the SRAM each group is mapped to (layer 0 -> SRAM 0,
// layer 1 -> SRAM 0, layer 2 -> SRAM 1, layer 3 -> SRAM 2), and that read data hold while
// rd_en is low. Before the reads, one slot is partly overwritten with broadcast words,
// which must land in every tree window of every SRAM and in no other slot.
module tb_input_buffer;
  import df_pkg::*;
  localparam int NS = 3, SL = 5, NG = 4, NPt = 8;
  localparam int MAP [NG] = '{0, 0, 1, 2};
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, wr_bcast = 0;
  logic [1:0] wr_sram = '0;
  logic [2:0] wr_slot = '0;
  feat_addr_t wr_addr = '0;
  feat_t wr_data = '0;
  logic rd_en [NG][NPt];
  logic [2:0] rd_slot [NG][NPt];
  feat_addr_t rd_addr [NG][NPt];
  feat_t rd_data [NG][NPt];
  feat_t model [NS][SL][1024];
  int checks = 0, failures = 0;

  input_buffer dut (.clk, .wr_en, .wr_bcast, .wr_sram, .wr_slot, .wr_addr, .wr_data, .rd_en, .rd_slot, .rd_addr, .rd_data);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    feat_t expv [NG][NPt];
    feat_t held [NG][NPt];
    for (int g = 0; g < NG; g++) for (int p = 0; p < NPt; p++) begin
      rd_en[g][p] = 0; rd_slot[g][p] = 0; rd_addr[g][p] = 0;
    end
    for (int s = 0; s < NS; s++) for (int k = 0; k < SL; k++) for (int a = 0; a < 1024; a++) begin
      model[s][k][a] = feat_t'($urandom);
      wr_en = 1; wr_sram = 2'(s); wr_slot = 3'(k); wr_addr = feat_addr_t'(a); wr_data = model[s][k][a];
      @(posedge clk); #1;
    end
    for (int a = 0; a < 128; a += 3) begin
      automatic feat_t d = feat_t'($urandom);
      for (int s = 0; s < NS; s++) for (int w = 0; w < 8; w++) model[s][2][w*128+a] = d;
      wr_en = 1; wr_bcast = 1; wr_sram = 2'($urandom_range(NS-1)); wr_slot = 3'd2;
      wr_addr = feat_addr_t'($urandom_range(7) * 128 + a); wr_data = d;
      @(posedge clk); #1;
    end
    wr_en = 0; wr_bcast = 0;
    for (int i = 0; i < 500; i++) begin
      for (int g = 0; g < NG; g++) for (int p = 0; p < NPt; p++) begin
        rd_en[g][p] = 1; rd_slot[g][p] = 3'($urandom_range(SL-1)); rd_addr[g][p] = feat_addr_t'($urandom);
        expv[g][p] = model[MAP[g]][rd_slot[g][p]][rd_addr[g][p]];
      end
      @(posedge clk); #1;
      for (int g = 0; g < NG; g++) for (int p = 0; p < NPt; p++) begin
        checks++;
        if (rd_data[g][p] !== expv[g][p]) begin
          failures++; $display("group %0d port %0d: %h expected %h", g, p, rd_data[g][p], expv[g][p]);
        end
        rd_en[g][p] = 0; rd_addr[g][p] = feat_addr_t'($urandom);
      end
      held = rd_data;
      @(posedge clk); #1;
      checks++;
      if (rd_data != held) begin failures++; $display("read data not held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
