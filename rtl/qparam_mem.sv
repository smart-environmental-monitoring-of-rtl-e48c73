// qparam_mem -- per-output-channel bias and requantisation parameters.
//
// Each word holds LANES qparam_t entries (bias, multiplier, shift), one per
// output channel of a channel group, and is read whole, one cycle after the
// address.  The host writes one entry at a time by its flat index
// (word = index / LANES, lane = index % LANES).  Batch normalisation is folded
// into these numbers offline, as 8-bit post-training quantisation does; the
// encoding is this design's choice.
module qparam_mem #(
  parameter int WORDS = 25,
  parameter int LANES = 16
) (
  input  logic                                 clk,
  input  logic [$clog2(WORDS)-1:0]             raddr,
  output unet_pkg::qparam_t [LANES-1:0]        rdata,
  input  logic                                 we,
  input  logic [$clog2(WORDS*LANES)-1:0]       widx,
  input  unet_pkg::qparam_t                    wdata
);
  localparam int LB = (LANES > 1) ? $clog2(LANES) : 1;
  unet_pkg::qparam_t [LANES-1:0] mem [WORDS];

  logic [$clog2(WORDS)-1:0] wword;
  logic [LB-1:0]            wlane;
  assign wword = $clog2(WORDS)'(widx / LANES);
  assign wlane = LB'(widx % LANES);

  always_ff @(posedge clk) begin
    if (we) mem[wword][wlane] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
