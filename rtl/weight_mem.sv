// weight_mem -- on-chip int8 weight memory.
//
// WORDS words of LANES*ICP signed bytes; a word holds the weights of LANES
// output channels for ICP input channels of one tap (byte l*ICP + k: output
// lane l, input channel k of the group), in the order the layer engine
// consumes them, so a layer reads its weights at one word per cycle.  The host
// writes whole words; the read port has one cycle of latency.  The paper
// gives the weights' precision (8 bit) and that they sit in block RAM; the
// layout is this design's choice.
module weight_mem #(
  parameter int WORDS = 928,
  parameter int LANES = 16,
  parameter int ICP   = 8
) (
  input  logic                     clk,
  input  logic [$clog2(WORDS)-1:0] raddr,
  output logic [LANES*ICP*8-1:0] rdata,
  input  logic                     we,
  input  logic [$clog2(WORDS)-1:0] waddr,
  input  logic [LANES*ICP*8-1:0] wdata
);
  logic [LANES*ICP*8-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
