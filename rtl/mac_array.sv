// mac_array -- LANES parallel int8 dot-product-accumulate lanes.
//
// Every enabled cycle a vector of ICP activation bytes (ICP input channels of
// one tap) is broadcast to all lanes; lane l multiplies it element-wise with
// its own ICP weight bytes (w[(l*ICP + k)*8 +: 8] goes with a[k]) and adds the
// ICP products to its sum, so lane l accumulates output channel
// (group*LANES + l).  `first` restarts the sums with the current products, so
// a new output pixel needs no separate clear cycle.  Results appear one cycle
// after the operands.  LANES*ICP multipliers in all (128 by default).
// The paper states 8-bit weights and activations; the 32-bit accumulator and
// the output-channel x input-channel parallelism are this design's.
module mac_array #(
  parameter int LANES = 16,
  parameter int ICP   = 8,
  parameter int ACCW  = 32
) (
  input  logic                          clk,
  input  logic                          en,
  input  logic                          first,
  input  logic [ICP*8-1:0]              a,
  input  logic [LANES*ICP*8-1:0]        w,
  output logic signed [ACCW-1:0]        acc [LANES]
);
  always_ff @(posedge clk) begin
    if (en)
      for (int l = 0; l < LANES; l++) begin
        logic signed [ACCW-1:0] dot;
        dot = '0;
        for (int k = 0; k < ICP; k++)
          dot += ACCW'($signed(a[k*8 +: 8]) * $signed(w[(l*ICP + k)*8 +: 8]));
        acc[l] <= (first ? ACCW'(0) : acc[l]) + dot;
      end
  end
endmodule
