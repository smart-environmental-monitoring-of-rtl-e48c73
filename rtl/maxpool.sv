// maxpool -- 2x2 max pooling, LANES channels in parallel.
//
// The four input words of one 2x2 window (LANES channels each) arrive on four
// enabled cycles, the first flagged by `first`; each lane keeps the signed
// maximum.  The result is valid the cycle after the fourth word.  The paper
// places a 2x2 max pool after every encoder block; the sequential form is
// this design's choice.
module maxpool #(
  parameter int LANES = 16
) (
  input  logic                  clk,
  input  logic                  en,
  input  logic                  first,
  input  logic [LANES*8-1:0]    din,
  output logic [LANES*8-1:0]    dout
);
  always_ff @(posedge clk) begin
    if (en)
      for (int l = 0; l < LANES; l++)
        if (first || $signed(din[l*8 +: 8]) > $signed(dout[l*8 +: 8]))
          dout[l*8 +: 8] <= din[l*8 +: 8];
  end
endmodule
