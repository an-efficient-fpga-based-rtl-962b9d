// tb_final_average: the final prediction must be the truncated mean of the two forest
// outputs, and the class 1 exactly when that mean is at least 0.5 (0x8000).
module tb_final_average;
  import df_pkg::*;
  feat_t cv [2];
  result_t res;
  int checks = 0, failures = 0;

  final_average dut (.cv, .result(res));

  initial begin
    int m;
    for (int i = 0; i < 3000; i++) begin
      cv[0] = feat_t'($urandom); cv[1] = feat_t'($urandom);
      if (i < 4) begin cv[0] = (i[0]) ? 16'hFFFF : 16'h0; cv[1] = (i[1]) ? 16'hFFFF : 16'h0; end
      #1;
      m = (int'(cv[0]) + int'(cv[1])) / 2;
      checks++;
      if (res.prob != feat_t'(m) || res.cls != (m >= 32768)) begin
        failures++; $display("%0d %0d -> %0d/%0d", cv[0], cv[1], res.prob, res.cls);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
