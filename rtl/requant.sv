// requant -- folded batch norm, ReLU and requantisation back to int8.
//
// Purely combinational, LANES lanes.  For each lane:
//   t = (acc + bias) * mult;  t += 2^(shift-1) when shift > 0;  t >>>= shift
//   if relu and t < 0: t = 0;  y = t saturated to [-128, 127].
// The paper's block is conv -> batch norm -> ReLU with 8-bit quantised
// parameters; folding batch norm into a per-channel bias and fixed-point scale
// is the usual form of that after post-training quantisation and is this
// design's choice, as are the rounding (half up) and the 16-bit multiplier.
module requant #(
  parameter int LANES = 16,
  parameter int ACCW  = 32
) (
  input  logic signed [ACCW-1:0]          acc [LANES],
  input  unet_pkg::qparam_t [LANES-1:0]   qp,
  input  logic                            relu,
  output logic [LANES*8-1:0]              y
);
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [ACCW:0]    s;
      logic signed [ACCW+17:0] t;
      s = (ACCW+1)'(acc[l]) + (ACCW+1)'(qp[l].bias);
      t = (ACCW+18)'(s) * $signed({1'b0, qp[l].mult});
      if (qp[l].shift != 0) t = t + ((ACCW+18)'(1) <<< (qp[l].shift - 6'd1));
      t = t >>> qp[l].shift;
      if (relu && t < 0) t = '0;
      if (t > 127)       y[l*8 +: 8] = 8'sd127;
      else if (t < -128) y[l*8 +: 8] = -8'sd128;
      else               y[l*8 +: 8] = t[7:0];
    end
  end
endmodule
