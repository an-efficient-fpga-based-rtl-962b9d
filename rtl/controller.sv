// controller: sample loading, layer pipeline sequencing and result counting.
//
// Loading: the DRAM side streams a sample as words (in_sram, in_addr, in_data, in_bcast) with a
// valid/ready handshake; in_last marks the sample's last word. Words are written into the
// free input-SRAM slot wr_slot. in_ready is low while all SLOTS slots hold samples that
// are complete or still in the pipeline (input back-pressure).
//
// Pipeline: the N_LAYERS layers work in lock step, each on a different sample. An epoch
// ends when every layer that holds a sample reports done. The controller then advances
// (adv, one cycle): the last layer's sample leaves (its class vector is averaged and
// pushed into the output buffer, its slot is freed, result_count increments), every
// sample moves one layer on, the layer buffers load the previous layers' registers
// (buf_load), and the oldest complete sample, if any, enters layer 0. In the next cycle
// layer_start pulses for the layers that now hold a sample. Advancing waits while the
// output buffer is full and a result would be pushed (output stall), and while there is
// neither a waiting sample nor a sample in the pipeline.
// Counting results and moving data into the buffers follow the paper; the lock-step
// advance rule and the slot bookkeeping are this design's choices.
module controller #(
  parameter int N_LAYERS = 4,
  parameter int N_SRAM   = 3,
  parameter int SLOTS    = N_LAYERS + 1,
  parameter int ADDR_W   = df_pkg::FEAT_ADDR_W,
  parameter int DATA_W   = df_pkg::FEAT_W
) (
  input  logic clk,
  input  logic rst_n,
  // sample stream from DRAM
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [$clog2(N_SRAM)-1:0] in_sram,
  input  logic [ADDR_W-1:0]         in_addr,
  input  logic [DATA_W-1:0]         in_data,
  input  logic                      in_last,
  input  logic                      in_bcast,
  // input buffer write port
  output logic                      wr_en,
  output logic                      wr_bcast,
  output logic [$clog2(N_SRAM)-1:0] wr_sram,
  output logic [$clog2(SLOTS)-1:0]  wr_slot,
  output logic [ADDR_W-1:0]         wr_addr,
  output logic [DATA_W-1:0]         wr_data,
  // layers
  input  logic                      layer_done  [N_LAYERS],
  output logic                      layer_start [N_LAYERS],
  output logic                      layer_valid [N_LAYERS],
  output logic [$clog2(SLOTS)-1:0]  layer_slot  [N_LAYERS],
  output logic                      adv,
  output logic                      buf_load,
  // output buffer
  input  logic                      out_full,
  output logic                      out_push,
  output logic [31:0]               result_count,
  output logic                      stall_out
);
  localparam int SW = $clog2(SLOTS);
  localparam int CW = $clog2(SLOTS + 1);

  typedef enum logic [1:0] {S_IDLE, S_START, S_RUN} state_e;
  state_e state;

  logic [CW-1:0] occupied, waiting;
  logic [SW-1:0] rd_slot;
  logic          accept, sample_in, all_done, any_valid, can_adv, take;

  // ---- loading ----
  assign in_ready  = (occupied < CW'(SLOTS));
  assign accept    = in_valid && in_ready;
  assign sample_in = accept && in_last;
  assign wr_en     = accept;
  assign wr_bcast  = in_bcast;
  assign wr_sram   = in_sram;
  assign wr_addr   = in_addr;
  assign wr_data   = in_data;

  // ---- pipeline ----
  always_comb begin
    all_done  = 1'b1;
    any_valid = 1'b0;
    for (int k = 0; k < N_LAYERS; k++) begin
      if (layer_valid[k] && !layer_done[k]) all_done = 1'b0;
      any_valid |= layer_valid[k];
    end
  end

  assign stall_out = (state == S_IDLE) && layer_valid[N_LAYERS-1] && out_full;
  assign can_adv   = (waiting != '0 || any_valid) && !stall_out;
  assign adv       = (state == S_IDLE) && can_adv;
  assign take      = adv && (waiting != '0);
  assign buf_load  = adv;
  assign out_push  = adv && layer_valid[N_LAYERS-1];

  always_comb
    for (int k = 0; k < N_LAYERS; k++) layer_start[k] = (state == S_START) && layer_valid[k];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      occupied     <= '0;
      waiting      <= '0;
      wr_slot      <= '0;
      rd_slot      <= '0;
      result_count <= '0;
      for (int k = 0; k < N_LAYERS; k++) begin
        layer_valid[k] <= 1'b0;
        layer_slot[k]  <= '0;
      end
    end else begin
      if (sample_in) wr_slot <= (wr_slot == SW'(SLOTS-1)) ? '0 : wr_slot + 1'b1;
      occupied <= occupied + CW'(sample_in) - CW'(out_push);
      waiting  <= waiting  + CW'(sample_in) - CW'(take);
      if (out_push) result_count <= result_count + 1;

      unique case (state)
        S_IDLE: if (adv) begin
          for (int k = N_LAYERS-1; k > 0; k--) begin
            layer_valid[k] <= layer_valid[k-1];
            layer_slot[k]  <= layer_slot[k-1];
          end
          layer_valid[0] <= take;
          layer_slot[0]  <= rd_slot;
          if (take) rd_slot <= (rd_slot == SW'(SLOTS-1)) ? '0 : rd_slot + 1'b1;
          state <= S_START;
        end
        S_START: state <= S_RUN;
        S_RUN:   if (all_done) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // bookkeeping rules: never more samples than slots, never start a sample that is absent
  always_ff @(posedge clk)
    if (rst_n) begin
      a_no_slot_overrun: assert (occupied <= CW'(SLOTS));
      a_take_has_slot:   assert (!take || waiting != '0);
    end
endmodule
