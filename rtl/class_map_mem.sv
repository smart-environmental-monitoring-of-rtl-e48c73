// class_map_mem -- the estimation map: one thickness class per pixel.
//
// PIXELS entries of $clog2(NCLS) bits.  The classifier layer writes one class
// per pixel; the host reads the finished map, one cycle after the address.
// Class 0 is clean water, class k is an oil film of k mm.
module class_map_mem #(
  parameter int PIXELS = 16384,
  parameter int NCLS   = 11
) (
  input  logic                       clk,
  input  logic                       we,
  input  logic [$clog2(PIXELS)-1:0]  waddr,
  input  logic [$clog2(NCLS)-1:0]    wdata,
  input  logic [$clog2(PIXELS)-1:0]  raddr,
  output logic [$clog2(NCLS)-1:0]    rdata
);
  logic [$clog2(NCLS)-1:0] mem [PIXELS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
