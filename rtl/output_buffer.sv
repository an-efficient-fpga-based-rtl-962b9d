// output_buffer: FIFO of final results waiting to be written to DRAM.
//
// DEPTH entries of result_t. push writes din when the FIFO is not full (the controller
// checks full before pushing); the read side is a valid/ready stream, a word leaves in a
// cycle with out_valid and out_ready both high. Depth and handshake are this design's
// choices; the paper only names the buffer.
module output_buffer
  import df_pkg::*;
#(
  parameter int DEPTH = 16
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    push,
  input  result_t din,
  output logic    full,
  output logic    out_valid,
  input  logic    out_ready,
  output result_t out_data
);
  localparam int AW = $clog2(DEPTH);
  result_t       mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   count;
  logic          do_push, do_pop;

  assign full      = (count == (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];
  assign do_push   = push && !full;
  assign do_pop    = out_valid && out_ready;

  always_ff @(posedge clk) if (do_push) mem[wp] <= din;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  // a push into a full FIFO would lose a result
  always_ff @(posedge clk)
    if (rst_n) a_no_overflow: assert (!(push && full));
endmodule
