// argmax -- per-pixel thickness class from the classifier logits.
//
// Combinational.  Compares the first NCLS of LANES signed logits and returns
// the index of the largest; on a tie the lower index (thinner class) wins.
// The paper assigns each output pixel to one of 11 classes (0 to 10 mm); the
// tie rule is this design's choice.
module argmax #(
  parameter int LANES = 16,
  parameter int NCLS  = 11,
  parameter int W     = 32
) (
  input  logic signed [W-1:0]        logit [LANES],
  output logic [$clog2(NCLS)-1:0]    cls
);
  always_comb begin
    logic signed [W-1:0] best;
    best = logit[0];
    cls  = '0;
    for (int l = 1; l < NCLS && l < LANES; l++)
      if (logit[l] > best) begin
        best = logit[l];
        cls  = $clog2(NCLS)'(l);
      end
  end
endmodule
