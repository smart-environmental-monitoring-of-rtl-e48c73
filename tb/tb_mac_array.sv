// tb_mac_array -- random operand vectors (3 input channels per lane) in
// streams of random length; after every closing
// operand the lane sums are compared with sums computed in the testbench.
// Also holds `en` low on some cycles, which must not change the sums.
module tb_mac_array;
  localparam int LANES = 4, ICP = 3;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en = 0, first = 0;
  logic [ICP*8-1:0] a;
  logic [LANES*ICP*8-1:0] w;
  logic signed [31:0] acc [LANES];
  longint expect_sum [LANES];
  int checks = 0, failures = 0;

  mac_array #(.LANES(LANES), .ICP(ICP), .ACCW(32)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = 0; w = 0;
    for (int run = 0; run < 200; run++) begin
      int n;
      n = $urandom_range(40, 1);
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        en = ($urandom_range(3) != 0) || (i == 0);
        first = (i == 0);
        a = {$urandom, $urandom};
        w = {$urandom, $urandom, $urandom, $urandom};
        if (en) begin
          // extreme operands now and then
          if ($urandom_range(7) == 0) begin a = {ICP{8'h80}}; w = {LANES*ICP{8'h80}}; end
          for (int l = 0; l < LANES; l++) begin
            if (first) expect_sum[l] = 0;
            for (int k = 0; k < ICP; k++)
              expect_sum[l] += longint'($signed(a[k*8 +: 8])) * $signed(w[(l*ICP + k)*8 +: 8]);
          end
        end
      end
      @(negedge clk); en = 0;
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (longint'(acc[l]) != expect_sum[l]) begin
          failures++;
          $display("FAIL run %0d lane %0d: %0d expected %0d", run, l, acc[l], expect_sum[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
