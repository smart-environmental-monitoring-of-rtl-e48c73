// act_mem -- on-chip feature-map memory (radar input cube, layer outputs and
// skip-connection tensors).
//
// A simple dual-port RAM of WORDS words, each LANES bytes wide, so one word
// holds LANES consecutive channels of one pixel.  The read port returns the
// word one cycle after the address (block-RAM timing).  The write port has one
// strobe per byte: the layer engine writes whole words (LANES output channels
// at once), the host loads the input cube byte by byte.  The paper only says
// the design keeps its data in block RAM; the word width and port set are
// this design's choice.
module act_mem #(
  parameter int WORDS = 57344,
  parameter int LANES = 16
) (
  input  logic                        clk,
  input  logic [$clog2(WORDS)-1:0]    raddr,
  output logic [LANES*8-1:0]          rdata,
  input  logic                        we,
  input  logic [$clog2(WORDS)-1:0]    waddr,
  input  logic [LANES-1:0]            wstrb,
  input  logic [LANES*8-1:0]          wdata
);
  logic [LANES*8-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we)
      for (int b = 0; b < LANES; b++)
        if (wstrb[b]) mem[waddr][b*8 +: 8] <= wdata[b*8 +: 8];
    rdata <= mem[raddr];
  end
endmodule
