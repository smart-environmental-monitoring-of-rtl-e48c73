// concat_addr -- address of one channel of a (possibly concatenated) tensor.
//
// A decoder convolution reads the channel-wise concatenation of the skip
// tensor copied from the encoder (cin_a channels at base_a) and the upsampled
// tensor (cin_b channels at base_b).  Neither is copied: this block maps
// (pixel, channel) to the byte address in whichever tensor holds it.  With
// cin_b = 0 it addresses a single tensor.  Skip channels come first, as the
// paper's architecture figure draws the copied tensor before the upsampled
// one; storing the two apart instead of copying is this design's choice.
module concat_addr (
  input  logic [31:0] pix,
  input  logic [15:0] ch,
  input  logic [15:0] cin_a,
  input  logic [15:0] cin_b,
  input  logic [31:0] base_a,
  input  logic [31:0] base_b,
  output logic [31:0] addr
);
  always_comb begin
    if (ch < cin_a) addr = base_a + pix * 32'(cin_a) + 32'(ch);
    else            addr = base_b + pix * 32'(cin_b) + 32'(ch - cin_a);
  end
endmodule
