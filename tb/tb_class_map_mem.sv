// tb_class_map_mem -- writes a class per pixel and reads the map back.
module tb_class_map_mem;
  localparam int PIXELS = 64, NCLS = 11;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [5:0] waddr, raddr;
  logic [3:0] wdata, rdata;
  int shadow [PIXELS];
  int checks = 0, failures = 0;

  class_map_mem #(.PIXELS(PIXELS), .NCLS(NCLS)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    waddr = 0; raddr = 0; wdata = 0;
    for (int p = 0; p < PIXELS; p++) begin
      @(negedge clk); we = 1; waddr = 6'(p); wdata = 4'($urandom_range(NCLS - 1));
      shadow[p] = int'(wdata);
    end
    @(negedge clk); we = 0;
    for (int p = 0; p < PIXELS; p++) begin
      raddr = 6'(p);
      @(negedge clk);
      checks++;
      if (int'(rdata) != shadow[p]) begin
        failures++;
        $display("FAIL pixel %0d: %0d expected %0d", p, rdata, shadow[p]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
