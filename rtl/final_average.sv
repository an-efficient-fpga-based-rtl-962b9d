// final_average: the final prediction of the cascade.
//
// Averages the N_CV class-vector entries of the last layer (one positive-class fraction
// per forest) and decides the class: cls = 1 when the mean is at least one half. Purely
// combinational; N_CV must be a power of two so the division is a shift. Averaging
// follows the paper; the class decision for two classes is this design's reading of the
// final "max" step.
module final_average
  import df_pkg::*;
#(
  parameter int N_CV = 2
) (
  input  feat_t   cv [N_CV],
  output result_t result
);
  localparam int SW = FEAT_W + $clog2(N_CV);
  logic [SW-1:0] sum;

  always_comb begin
    sum = '0;
    for (int i = 0; i < N_CV; i++) sum += SW'(cv[i]);
    result.prob = feat_t'(sum >> $clog2(N_CV));
    result.cls  = result.prob[FEAT_W-1];
  end
endmodule
