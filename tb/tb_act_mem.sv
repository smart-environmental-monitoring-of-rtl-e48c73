// tb_act_mem -- random byte-strobed writes and word reads against a shadow
// copy; checks the one-cycle read latency and that unstrobed bytes keep
// their old value.
module tb_act_mem;
  localparam int WORDS = 64, LANES = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [5:0] raddr, waddr;
  logic [LANES*8-1:0] rdata, wdata;
  logic we = 0;
  logic [LANES-1:0] wstrb;
  logic [LANES*8-1:0] shadow [WORDS];
  int checks = 0, failures = 0;

  act_mem #(.WORDS(WORDS), .LANES(LANES)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    raddr = 0; waddr = 0; wdata = 0; wstrb = 0;
    // fill every word
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk); we = 1; waddr = 6'(i); wstrb = '1; wdata = {$urandom, $urandom};
      shadow[i] = wdata;
    end
    // random partial writes
    for (int i = 0; i < 300; i++) begin
      @(negedge clk); we = 1; waddr = 6'($urandom_range(WORDS - 1)); wstrb = LANES'($urandom);
      wdata = {$urandom, $urandom};
      for (int b = 0; b < LANES; b++) if (wstrb[b]) shadow[waddr][b*8 +: 8] = wdata[b*8 +: 8];
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < WORDS; i++) begin
      raddr = 6'(i);
      @(negedge clk);
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
