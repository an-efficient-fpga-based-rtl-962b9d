// node_ram: the "nodes RAM" of one NCU.
//
// Holds the trees of one group: TREES trees, each in a region of 2**NODE_ADDR_W words,
// addressed {tree, node}. Each word is one node in the 32-bit format of df_pkg. Reads are
// synchronous: rd_data shows the word addressed in the cycle rd_en was high, one clock
// later, and holds it until the next read, so the NCU can use the node's fields for the
// rest of its 4-cycle node period. A separate write port loads the trees; the paper does
// not say how trees reach the RAM, so this port is this design's addition.
module node_ram #(
  parameter int W      = df_pkg::NODE_W,
  parameter int ADDR_W = df_pkg::RAM_ADDR_W
) (
  input  logic              clk,
  input  logic              rd_en,
  input  logic [ADDR_W-1:0] rd_addr,
  output logic [W-1:0]      rd_data,
  input  logic              wr_en,
  input  logic [ADDR_W-1:0] wr_addr,
  input  logic [W-1:0]      wr_data
);
  logic [W-1:0] mem [2**ADDR_W];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
