// df_top: on-chip logic of the deep-forest cascade accelerator.
//
// Data path: samples stream in from the DRAM side into the input buffer (three input
// SRAMs, one per multi-grained-scanning vector, with one slot per sample in flight).
// N_LAYERS cascade layers follow, each with N_PE forests of N_NCU*8 trees (defaults 4
// layers x 2 forests x 32 trees, as in the ADULT model). Layer 0 reads its features
// straight from input SRAM 0; layer k >= 1 reads them through layer buffer k, which joins
// the class vector produced by layer k-1 with the sample's original features from input
// SRAM (k-1) mod 3. The class vector of the last layer is averaged into the final
// prediction and queued in the output buffer for the DRAM side. The controller moves the
// samples through the layers in lock step, so up to N_LAYERS samples are processed at
// once, one per layer.
//
// Interfaces (all synchronous to clk, active-low asynchronous reset rst_n):
//   cfg_*   load the trees: one 32-bit node word per cycle into the nodes RAM of NCU
//           cfg_ncu of PE cfg_pe of layer cfg_layer, at cfg_addr = {tree, node}.
//   in_*    sample words (valid/ready): in_sram selects the input SRAM, in_addr is the
//           feature address {tree window, feature_idx}, in_last closes the sample.
//           With in_bcast the word goes to feature in_addr[6:0] of every tree window of
//           every input SRAM (one vector shared by all trees, no multi-grained scanning).
//   out_*   results (valid/ready): out_prob is the mean positive-class fraction (unsigned
//           0.16 fraction), out_class the decision.
// The structure follows the paper's overall architecture; the stream and configuration
// interfaces stand in for the off-chip DRAM and are this design's choices.
module df_top
  import df_pkg::*;
#(
  parameter int N_LAYERS   = 4,
  parameter int N_PE       = 2,
  parameter int N_NCU      = 4,
  parameter int N_SRAM     = 3,
  parameter int FEAT_WORDS = 2**FEAT_ADDR_W,
  parameter int OUT_DEPTH  = 16
) (
  input  logic clk,
  input  logic rst_n,
  // tree configuration
  input  logic                        cfg_we,
  input  logic [$clog2(N_LAYERS)-1:0] cfg_layer,
  input  logic [$clog2(N_PE)-1:0]     cfg_pe,
  input  logic [$clog2(N_NCU)-1:0]    cfg_ncu,
  input  ram_addr_t                   cfg_addr,
  input  logic [NODE_W-1:0]           cfg_data,
  // sample stream
  input  logic                        in_valid,
  input  logic                        in_bcast,
  output logic                        in_ready,
  input  logic [$clog2(N_SRAM)-1:0]   in_sram,
  input  feat_addr_t                  in_addr,
  input  feat_t                       in_data,
  input  logic                        in_last,
  // result stream
  output logic                        out_valid,
  input  logic                        out_ready,
  output feat_t                       out_prob,
  output logic                        out_class,
  output logic [31:0]                 result_count
);
  localparam int SLOTS  = N_LAYERS + 1;
  localparam int N_PORT = N_PE * N_NCU;
  localparam int SW     = $clog2(SLOTS);

  // controller <-> everything
  logic                      wr_en, wr_bcast;
  logic [$clog2(N_SRAM)-1:0] wr_sram;
  logic [SW-1:0]             wr_slot;
  feat_addr_t                wr_addr;
  feat_t                     wr_data;
  logic                      layer_done  [N_LAYERS];
  logic                      layer_start [N_LAYERS];
  logic                      layer_valid [N_LAYERS];
  logic [SW-1:0]             layer_slot  [N_LAYERS];
  logic                      adv, buf_load, out_full, out_push, stall_out;

  // feature ports of the layers and read ports of the input buffer
  logic       l_rd   [N_LAYERS][N_PORT];
  feat_addr_t l_addr [N_LAYERS][N_PORT];
  feat_t      l_data [N_LAYERS][N_PORT];
  logic       s_rd   [N_LAYERS][N_PORT];
  logic [SW-1:0] s_slot [N_LAYERS][N_PORT];
  feat_addr_t s_addr [N_LAYERS][N_PORT];
  feat_t      s_data [N_LAYERS][N_PORT];
  feat_t      cvec   [N_LAYERS][N_PE];

  controller #(.N_LAYERS(N_LAYERS), .N_SRAM(N_SRAM), .SLOTS(SLOTS)) u_ctrl (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_sram, .in_addr, .in_data, .in_last, .in_bcast,
    .wr_en, .wr_bcast, .wr_sram, .wr_slot, .wr_addr, .wr_data,
    .layer_done, .layer_start, .layer_valid, .layer_slot, .adv, .buf_load,
    .out_full, .out_push, .result_count, .stall_out
  );

  input_buffer #(.N_SRAM(N_SRAM), .SLOTS(SLOTS), .FEAT_WORDS(FEAT_WORDS),
                 .N_GROUPS(N_LAYERS), .N_PORT(N_PORT)) u_inbuf (
    .clk, .wr_en, .wr_bcast, .wr_sram, .wr_slot, .wr_addr, .wr_data,
    .rd_en(s_rd), .rd_slot(s_slot), .rd_addr(s_addr), .rd_data(s_data)
  );

  for (genvar k = 0; k < N_LAYERS; k++) begin : g_layer
    cascade_layer #(.N_PE(N_PE), .N_NCU(N_NCU)) u_layer (
      .clk, .rst_n, .start(layer_start[k]),
      .feat_rd(l_rd[k]), .feat_addr(l_addr[k]), .feature(l_data[k]),
      .class_vec(cvec[k]), .done(layer_done[k]),
      .cfg_we(cfg_we && cfg_layer == k), .cfg_pe, .cfg_ncu, .cfg_addr, .cfg_data
    );

    if (k == 0) begin : g_direct
      // layer 0 reads the input buffer directly
      for (genvar p = 0; p < N_PORT; p++) begin : g_p
        assign s_rd[k][p]   = l_rd[k][p];
        assign s_slot[k][p] = layer_slot[k];
        assign s_addr[k][p] = l_addr[k][p];
        assign l_data[k][p] = s_data[k][p];
      end
    end else begin : g_buf
      layer_buffer #(.N_CV(N_PE), .N_PORT(N_PORT), .SLOTS(SLOTS)) u_lbuf (
        .clk, .rst_n, .load(buf_load), .cv_in(cvec[k-1]), .slot_in(layer_slot[k-1]),
        .feat_rd(l_rd[k]), .feat_addr(l_addr[k]), .feature(l_data[k]),
        .sram_rd(s_rd[k]), .sram_slot(s_slot[k]), .sram_addr(s_addr[k]), .sram_data(s_data[k])
      );
    end
  end

  result_t final_res, out_res;

  final_average #(.N_CV(N_PE)) u_final (.cv(cvec[N_LAYERS-1]), .result(final_res));

  output_buffer #(.DEPTH(OUT_DEPTH)) u_outbuf (
    .clk, .rst_n, .push(out_push), .din(final_res), .full(out_full),
    .out_valid, .out_ready, .out_data(out_res)
  );

  assign out_prob  = out_res.prob;
  assign out_class = out_res.cls;
endmodule
