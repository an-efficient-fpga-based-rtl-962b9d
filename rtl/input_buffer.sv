// input_buffer: the N_SRAM input SRAMs holding a sample's feature vectors.
//
// With multi-grained scanning over three window sizes a sample arrives as three feature
// vectors; input SRAM s holds vector s. Each SRAM is divided into SLOTS sample slots of
// FEAT_WORDS words, so that the samples in flight in the layer pipeline (one per layer)
// keep their original features while the next sample is being written: a slot is freed
// only when its sample leaves the last layer. The slots are this design's addition; the
// paper only says the buffer is built of RAM and stores three feature vectors.
//
// Reads come in N_GROUPS groups of N_PORT ports, one group per cascade layer; group g
// reads SRAM df_pkg::sram_of_layer(g, N_SRAM). Every read port is synchronous: rd_data is
// the word at {rd_slot, rd_addr} one cycle after rd_en and holds until the next read.
// Writes (from the DRAM side) take one word per cycle. A word with wr_bcast set is written
// to feature index wr_addr[6:0] of every tree window of every SRAM: a model without
// multi-grained scanning (one vector, the same features for every tree) then loads a
// sample in as many beats as it has features. To allow this, each SRAM is built of one bank
// per tree window (the bank is selected by the address's top bits, and a read port keeps
// the selected bank in a register to pick its output); the broadcast is this design's
// addition.
module input_buffer
  import df_pkg::*;
#(
  parameter int N_SRAM     = 3,
  parameter int SLOTS      = 5,
  parameter int FEAT_WORDS = 2**FEAT_ADDR_W,
  parameter int N_GROUPS   = 4,
  parameter int N_PORT     = 8
) (
  input  logic clk,
  input  logic wr_en,
  input  logic wr_bcast,
  input  logic [$clog2(N_SRAM)-1:0] wr_sram,
  input  logic [$clog2(SLOTS)-1:0]  wr_slot,
  input  feat_addr_t                wr_addr,
  input  feat_t                     wr_data,
  input  logic                      rd_en   [N_GROUPS][N_PORT],
  input  logic [$clog2(SLOTS)-1:0]  rd_slot [N_GROUPS][N_PORT],
  input  feat_addr_t                rd_addr [N_GROUPS][N_PORT],
  output feat_t                     rd_data [N_GROUPS][N_PORT]
);
  localparam int WIN   = 2**FEAT_IDX_W;               // words per tree window
  localparam int NWIN  = (FEAT_WORDS + WIN - 1) / WIN; // banks per SRAM
  localparam int DEPTH = SLOTS * WIN;                  // words per bank
  localparam int AW    = $clog2(DEPTH);
  localparam int WW    = FEAT_ADDR_W - FEAT_IDX_W;

  function automatic logic [AW-1:0] offset(logic [$clog2(SLOTS)-1:0] slot, logic [FEAT_IDX_W-1:0] idx);
    return AW'(slot) * AW'(WIN) + AW'(idx);
  endfunction

  for (genvar s = 0; s < N_SRAM; s++) begin : g_sram
    // one bank per tree window; a read port reads the bank of its address's window
    feat_t q [N_GROUPS][N_PORT][NWIN];

    for (genvar w = 0; w < NWIN; w++) begin : g_win
      feat_t mem [DEPTH];

      always_ff @(posedge clk)
        if (wr_en && (wr_bcast || (wr_sram == s && wr_addr[FEAT_ADDR_W-1:FEAT_IDX_W] == WW'(w))))
          mem[offset(wr_slot, wr_addr[FEAT_IDX_W-1:0])] <= wr_data;

      for (genvar g = 0; g < N_GROUPS; g++) begin : g_grp
        if (sram_of_layer(g, N_SRAM) == s) begin : g_rd
          for (genvar p = 0; p < N_PORT; p++) begin : g_port
            always_ff @(posedge clk)
              if (rd_en[g][p] && rd_addr[g][p][FEAT_ADDR_W-1:FEAT_IDX_W] == WW'(w))
                q[g][p][w] <= mem[offset(rd_slot[g][p], rd_addr[g][p][FEAT_IDX_W-1:0])];
          end
        end
      end
    end

    for (genvar g = 0; g < N_GROUPS; g++) begin : g_grp
      if (sram_of_layer(g, N_SRAM) == s) begin : g_rd
        for (genvar p = 0; p < N_PORT; p++) begin : g_port
          logic [WW-1:0] sel;
          always_ff @(posedge clk)
            if (rd_en[g][p]) sel <= rd_addr[g][p][FEAT_ADDR_W-1:FEAT_IDX_W];
          assign rd_data[g][p] = q[g][p][sel];
        end
      end
    end
  end
endmodule
