// tb_maxpool -- random 2x2 windows of signed bytes, four words each; checks
// the per-lane maximum one cycle after the fourth word.
module tb_maxpool;
  localparam int LANES = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en = 0, first = 0;
  logic [LANES*8-1:0] din, dout;
  int mx [LANES];
  int checks = 0, failures = 0;

  maxpool #(.LANES(LANES)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    din = 0;
    for (int win = 0; win < 300; win++) begin
      for (int t = 0; t < 4; t++) begin
        @(negedge clk);
        en = 1; first = (t == 0); din = $urandom;
        for (int l = 0; l < LANES; l++) begin
          int v;
          v = int'($signed(din[l*8 +: 8]));
          if (t == 0 || v > mx[l]) mx[l] = v;
        end
      end
      @(negedge clk); en = 0; din = $urandom;
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (int'($signed(dout[l*8 +: 8])) != mx[l]) begin
          failures++;
          $display("FAIL window %0d lane %0d: %0d expected %0d", win, l,
                   $signed(dout[l*8 +: 8]), mx[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
