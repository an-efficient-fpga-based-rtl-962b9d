// cascade_layer: one layer of the cascade forest.
//
// N_PE processing elements run the layer's forests side by side (PE 0 = forest A, a
// completely-random tree forest; PE 1 = forest B, a random forest; the hardware does not
// care which kind a forest is, only the trees in its RAMs differ). The end-of-layer
// pipeline register captures each PE's mean as soon as that PE finishes; together they
// form the layer's class vector, which stays valid until the layer is started on the
// next sample, so the next layer can be loaded while this one already works again.
//
// Interface: start is a one-cycle pulse. done is high while no PE is busy, that is, once
// both registers hold the results of the last start. Feature port k = pe*N_NCU + ncu.
module cascade_layer
  import df_pkg::*;
#(
  parameter int N_PE  = 2,
  parameter int N_NCU = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  output logic       feat_rd   [N_PE*N_NCU],
  output feat_addr_t feat_addr [N_PE*N_NCU],
  input  feat_t      feature   [N_PE*N_NCU],
  output feat_t      class_vec [N_PE],
  output logic       done,
  input  logic       cfg_we,
  input  logic [$clog2(N_PE)-1:0]  cfg_pe,
  input  logic [$clog2(N_NCU)-1:0] cfg_ncu,
  input  ram_addr_t  cfg_addr,
  input  logic [NODE_W-1:0] cfg_data
);
  logic [N_PE-1:0] pe_busy;

  for (genvar p = 0; p < N_PE; p++) begin : g_pe
    logic       rd   [N_NCU];
    feat_addr_t addr [N_NCU];
    feat_t      data [N_NCU];
    feat_t      mean;
    logic       pe_done;

    for (genvar i = 0; i < N_NCU; i++) begin : g_port
      assign feat_rd[p*N_NCU+i]   = rd[i];
      assign feat_addr[p*N_NCU+i] = addr[i];
      assign data[i]              = feature[p*N_NCU+i];
    end

    pe #(.N_NCU(N_NCU)) u_pe (
      .clk, .rst_n, .start,
      .feat_rd(rd), .feat_addr(addr), .feature(data),
      .mean(mean), .done(pe_done), .busy(pe_busy[p]),
      .cfg_we(cfg_we && cfg_pe == p), .cfg_ncu(cfg_ncu), .cfg_addr(cfg_addr), .cfg_data(cfg_data)
    );

    // end-of-layer pipeline register
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)       class_vec[p] <= '0;
      else if (pe_done) class_vec[p] <= mean;
    end
  end

  assign done = ~|pe_busy;
endmodule
