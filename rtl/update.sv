// update: the node-updating module paired with each NCU.
//
// It holds a period counter and the currentnode_idx register. The counter counts the
// PERIOD (= 4) clock cycles of one node evaluation and is given to the NCU as its phase.
// In the last cycle of a period (phase == PERIOD-1) currentnode_idx is replaced by the
// NCU's nextnode_idx, or by 0 (root of the next tree) when the NCU raises finish. The
// counter and the register follow the paper; using the counter as the NCU's phase,
// the start/run controls and the reset are this design's choices.
//
// Timing: start (one cycle) sets phase 0 and currentnode_idx 0 in the next cycle; the
// counter then advances every cycle while run is high.
module update #(
  parameter int PERIOD = df_pkg::PERIOD,
  parameter int ADDR_W = df_pkg::NODE_ADDR_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic                      run,
  input  logic [ADDR_W-1:0]         nextnode_idx,
  input  logic                      finish,
  output logic [ADDR_W-1:0]         currentnode_idx,
  output logic [$clog2(PERIOD)-1:0] phase
);
  localparam int PW = $clog2(PERIOD);
  localparam logic [PW-1:0] LAST = PW'(PERIOD - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase           <= '0;
      currentnode_idx <= '0;
    end else if (start) begin
      phase           <= '0;
      currentnode_idx <= '0;
    end else if (run) begin
      phase <= (phase == LAST) ? '0 : phase + 1'b1;
      if (phase == LAST)
        currentnode_idx <= finish ? '0 : nextnode_idx;
    end
  end
endmodule
