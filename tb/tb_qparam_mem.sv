// tb_qparam_mem -- writes per-channel entries by flat index and checks that
// each word returns the LANES entries of its channel group in lane order.
module tb_qparam_mem;
  import unet_pkg::*;
  localparam int WORDS = 6, LANES = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [2:0] raddr;
  qparam_t [LANES-1:0] rdata;
  logic we = 0;
  logic [4:0] widx;
  qparam_t wdata;
  qparam_t shadow [WORDS*LANES];
  int checks = 0, failures = 0;

  qparam_mem #(.WORDS(WORDS), .LANES(LANES)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    raddr = 0; widx = 0; wdata = '0;
    for (int i = WORDS * LANES - 1; i >= 0; i--) begin
      @(negedge clk); we = 1; widx = 5'(i);
      wdata.bias = $urandom; wdata.mult = 16'($urandom); wdata.shift = 6'($urandom);
      shadow[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int w = 0; w < WORDS; w++) begin
      raddr = 3'(w);
      @(negedge clk);
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (rdata[l] !== shadow[w * LANES + l]) begin
          failures++;
          $display("FAIL word %0d lane %0d", w, l);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
