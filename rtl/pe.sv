// pe: processing element for one forest of N_NCU*8 trees (32 in the paper).
//
// N_NCU NCUs, each with its own update module, run in parallel; NCU i holds trees
// 8i..8i+7 and walks them one after another, so a short tree is followed at once by the
// next one and differences in path length only matter at the end of the group. When all
// NCUs are done, the average unit forms the forest mean, which this PE presents on mean
// with a one-cycle done pulse. The structure follows the paper; the small state machine
// that sequences NCUs and average is this design's.
//
// Interface: start is a one-cycle pulse; the feature ports (one per NCU) must answer one
// cycle after feat_rd. cfg_* writes word cfg_addr of the nodes RAM of NCU cfg_ncu.
module pe
  import df_pkg::*;
#(
  parameter int N_NCU = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  output logic       feat_rd   [N_NCU],
  output feat_addr_t feat_addr [N_NCU],
  input  feat_t      feature   [N_NCU],
  output feat_t      mean,
  output logic       done,
  output logic       busy,
  input  logic       cfg_we,
  input  logic [$clog2(N_NCU)-1:0] cfg_ncu,
  input  ram_addr_t  cfg_addr,
  input  logic [NODE_W-1:0] cfg_data
);
  typedef enum logic [1:0] {S_IDLE, S_TREES, S_AVG} state_e;
  state_e state;

  prob_t      prob_total [N_NCU];
  logic       ncu_done   [N_NCU];
  logic       all_done, avg_valid;

  for (genvar i = 0; i < N_NCU; i++) begin : g_ncu
    node_addr_t cur, nxt;
    logic [1:0] phase;
    logic       fin, nbusy;

    update u_update (
      .clk, .rst_n, .start, .run(nbusy),
      .nextnode_idx(nxt), .finish(fin), .currentnode_idx(cur), .phase(phase)
    );

    ncu u_ncu (
      .clk, .rst_n, .start,
      .phase(phase), .currentnode_idx(cur), .nextnode_idx(nxt), .finish(fin), .busy(nbusy),
      .feat_rd(feat_rd[i]), .feat_addr(feat_addr[i]), .feature(feature[i]),
      .prob_total(prob_total[i]), .done(ncu_done[i]),
      .cfg_we(cfg_we && cfg_ncu == i), .cfg_addr(cfg_addr), .cfg_data(cfg_data)
    );
  end

  always_comb begin
    all_done = 1'b1;
    for (int i = 0; i < N_NCU; i++) all_done &= ncu_done[i];
  end

  average #(.N_NCU(N_NCU)) u_avg (
    .clk, .rst_n, .start(state == S_TREES && all_done),
    .prob_total(prob_total), .mean(mean), .valid(avg_valid)
  );

  assign busy = (state != S_IDLE) || done;   // until the done pulse has been seen

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE:  if (start) state <= S_TREES;
        S_TREES: if (all_done) state <= S_AVG;
        S_AVG:   if (avg_valid) begin state <= S_IDLE; done <= 1'b1; end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
