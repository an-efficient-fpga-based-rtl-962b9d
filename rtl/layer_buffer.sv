// layer_buffer: input of cascade layer k >= 1.
//
// On load (the controller's signal) it captures the class vector of the previous layer
// (the N_CV pipeline-register values) and the input-SRAM slot of the sample that enters
// layer k. It then answers the layer's feature reads with the concatenation of that class
// vector and the sample's original feature vector: in every tree window of the feature
// address {tree, feature_idx}, feature_idx 0..N_CV-1 returns class-vector entry
// feature_idx, and any other index is fetched from the input SRAM at the same address.
// The concatenation follows the paper; doing it at read time and this address map are
// this design's choices. Reads have one cycle latency, like the input SRAM behind it.
module layer_buffer
  import df_pkg::*;
#(
  parameter int N_CV   = 2,
  parameter int N_PORT = 8,
  parameter int SLOTS  = 5
) (
  input  logic clk,
  input  logic rst_n,
  input  logic load,
  input  feat_t cv_in [N_CV],
  input  logic [$clog2(SLOTS)-1:0] slot_in,
  // feature ports towards the NCUs
  input  logic       feat_rd   [N_PORT],
  input  feat_addr_t feat_addr [N_PORT],
  output feat_t      feature   [N_PORT],
  // reads forwarded to the input SRAM
  output logic       sram_rd   [N_PORT],
  output logic [$clog2(SLOTS)-1:0] sram_slot [N_PORT],
  output feat_addr_t sram_addr [N_PORT],
  input  feat_t      sram_data [N_PORT]
);
  feat_t cv [N_CV];
  logic [$clog2(SLOTS)-1:0] slot;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot <= '0;
      for (int i = 0; i < N_CV; i++) cv[i] <= '0;
    end else if (load) begin
      slot <= slot_in;
      cv   <= cv_in;
    end
  end

  for (genvar p = 0; p < N_PORT; p++) begin : g_port
    logic [FEAT_IDX_W-1:0] idx;
    logic                  use_cv;
    feat_t                 cv_q;

    assign idx          = feat_addr[p][FEAT_IDX_W-1:0];
    assign sram_rd[p]   = feat_rd[p] && !(idx < FEAT_IDX_W'(N_CV));
    assign sram_slot[p] = slot;
    assign sram_addr[p] = feat_addr[p];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        use_cv <= 1'b0;
        cv_q   <= '0;
      end else if (feat_rd[p]) begin
        use_cv <= (idx < FEAT_IDX_W'(N_CV));
        cv_q   <= (idx < FEAT_IDX_W'(N_CV)) ? cv[idx[$clog2(N_CV)-1:0]] : '0;
      end
    end

    assign feature[p] = use_cv ? cv_q : sram_data[p];
  end
endmodule
