// average: mean of one forest (one PE).
//
// The adders sum the prob_total of the N_NCU NCUs of a PE (the sum of all the forest's
// leaf values); the sum is loaded into a shift register that shifts right one bit per
// cycle, SHIFTS = log2(trees per forest) = 5 times for 32 trees, which divides by the
// number of trees. The mean is then held in mean with valid high until the next start.
// Adders plus shift register follow the paper; one combinational adder tree and one
// shift per cycle are this design's choices.
//
// Timing: start (one cycle) loads the sum; valid rises SHIFTS+1 cycles later.
module average
  import df_pkg::*;
#(
  parameter int N_NCU  = 4,
  parameter int SHIFTS = $clog2(N_NCU * TREES)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  prob_t prob_total [N_NCU],
  output feat_t mean,
  output logic  valid
);
  localparam int SUM_W = PROB_W + $clog2(N_NCU);
  localparam int CW    = $clog2(SHIFTS + 1);

  logic [SUM_W-1:0] sum, sreg;
  logic [CW-1:0]    cnt;
  logic             active;

  always_comb begin
    sum = '0;
    for (int i = 0; i < N_NCU; i++) sum += SUM_W'(prob_total[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sreg <= '0; cnt <= '0; active <= 1'b0; valid <= 1'b0; mean <= '0;
    end else if (start) begin
      sreg <= sum; cnt <= '0; active <= 1'b1; valid <= 1'b0;
    end else if (active) begin
      if (cnt == CW'(SHIFTS)) begin
        active <= 1'b0;
        valid  <= 1'b1;
        mean   <= feat_t'(sreg);
      end else begin
        sreg <= sreg >> 1;
        cnt  <= cnt + 1'b1;
      end
    end
  end
endmodule
