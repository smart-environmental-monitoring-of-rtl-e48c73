// tb_weight_mem -- writes random weight words, reads them back in a different
// order and checks data and one-cycle read latency.
module tb_weight_mem;
  localparam int WORDS = 50, LANES = 4, ICP = 2;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [5:0] raddr, waddr;
  logic [LANES*ICP*8-1:0] rdata, wdata;
  logic we = 0;
  logic [LANES*ICP*8-1:0] shadow [WORDS];
  int checks = 0, failures = 0;

  weight_mem #(.WORDS(WORDS), .LANES(LANES), .ICP(ICP)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    raddr = 0; waddr = 0; wdata = 0;
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk); we = 1; waddr = 6'(i); wdata = {$urandom, $urandom}; shadow[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = WORDS - 1; i >= 0; i--) begin
      raddr = 6'(i);
      @(posedge clk); #1;
      checks++;
      if (rdata !== shadow[i]) begin
        failures++;
        $display("FAIL word %0d: %h expected %h", i, rdata, shadow[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
