// tb_argmax -- random logits (with forced ties and garbage in the unused
// lanes); checks the index of the first maximum among the NCLS class lanes.
module tb_argmax;
  localparam int LANES = 16, NCLS = 11;
  logic signed [31:0] logit [LANES];
  logic [3:0] cls;
  int checks = 0, failures = 0;

  argmax #(.LANES(LANES), .NCLS(NCLS), .W(32)) dut (.*);

  initial begin
    for (int it = 0; it < 3000; it++) begin
      int best, bi;
      for (int l = 0; l < LANES; l++)
        logit[l] = (it % 4 == 0) ? int'($urandom_range(3)) : $urandom;
      // unused lanes may hold anything, even a larger value
      logit[LANES - 1] = 32'sh7fffffff;
      #1;
      best = logit[0]; bi = 0;
      for (int l = 1; l < NCLS; l++) if (logit[l] > best) begin best = logit[l]; bi = l; end
      checks++;
      if (int'(cls) != bi) begin
        failures++;
        if (failures < 10) $display("FAIL it %0d: %0d expected %0d", it, cls, bi);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
