// tiny_unet_top -- Tiny U-Net accelerator for radar oil-slick thickness maps.
//
// Input: an IMG x IMG x CIN radar cube (CIN frequency channels, int8, already
// normalised and quantised), written by the host into the feature-map memory
// at byte (y*IMG + x)*CINP + c, where CINP is CIN rounded up to a multiple of
// ICP (16 for 9 channels); the padding channels need not be written, their
// weights are zero.  Weights and per-channel parameters are written
// by the host beforehand.  A `start` pulse runs the whole network; when `done`
// pulses, the estimation map (one class 0..NCLS-1 per pixel, class k = k mm of
// oil, 0 = clean water) can be read back through the class-map port.
//
// Network (paper's main configuration): NB = 2 blocks per side, channels cut
// by F = 4 from the U-Net's 64 -> 16, 32, bottleneck 64, then back up with
// 2x2 transposed convolutions and skip concatenation, and a 1x1 classifier to
// 11 classes.  Everything runs on one layer engine with LANES MAC lanes of
// ICP multipliers each, layer after layer, out of on-chip memories:
//   act_mem       feature maps: two ping-pong regions + one skip tensor per level
//   weight_mem    int8 weights, one word per (group, tap, ICP in-channels)
//   qparam_mem    per-channel bias / requantisation (folded batch norm)
//   class_map_mem the output map
// Host writes are only allowed while `busy` is low.  Latency is the sum of the
// layers' issue cycles (unet_pkg::layer_cycles) plus 7 cycles per layer and
// 1 at the end; `cycles` counts the clock cycles of the last run.
module tiny_unet_top #(
  parameter int IMG   = 128,   // image width and height (architecture figure: 128^2)
  parameter int CIN   = 9,     // radar frequencies, 4..12 GHz in 1 GHz steps
  parameter int NCLS  = 11,    // thickness classes 0..10 mm
  parameter int NB    = 2,     // convolution blocks in encoder and decoder (B)
  parameter int CBASE = 64,    // channels of the first block of the full U-Net
  parameter int F     = 4,     // channel reduction factor
  parameter int LANES = 16,    // MAC lanes (output channels per cycle)
  parameter int ICP   = 8,     // input channels per lane and cycle
  localparam int C0     = CBASE / F,
  localparam int CINP   = unet_pkg::cin_pad(CIN, ICP),
  localparam int AWORDS = unet_pkg::act_bytes(IMG, CINP, C0, NB) / LANES,
  localparam int WWORDS = unet_pkg::weight_words(IMG, CINP, C0, NB, NCLS, LANES, ICP),
  localparam int PWORDS = unet_pkg::param_words(IMG, CINP, C0, NB, NCLS, LANES, ICP),
  localparam int PIXELS = IMG * IMG
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // host: load the radar cube
  input  logic                              in_we,
  input  logic [$clog2(AWORDS*LANES)-1:0]   in_addr,
  input  logic [7:0]                        in_data,
  // host: load weights
  input  logic                              w_we,
  input  logic [$clog2(WWORDS)-1:0]         w_addr,
  input  logic [LANES*ICP*8-1:0]            w_data,
  // host: load per-channel parameters
  input  logic                              p_we,
  input  logic [$clog2(PWORDS*LANES)-1:0]   p_idx,
  input  unet_pkg::qparam_t                 p_data,
  // control
  input  logic                              start,
  output logic                              busy,
  output logic                              done,
  output logic [7:0]                        layer,
  output logic [31:0]                       cycles,
  // host: read the estimation map
  input  logic [$clog2(PIXELS)-1:0]         map_addr,
  output logic [$clog2(NCLS)-1:0]           map_class
);
  import unet_pkg::*;

  localparam int LB = (LANES > 1) ? $clog2(LANES) : 1;

  layer_t cfg;
  logic   eng_start, eng_done, eng_busy;

  unet_ctrl #(.IMG(IMG), .CIN(CIN), .C0(C0), .NB(NB), .NCLS(NCLS), .LANES(LANES),
              .ICP(ICP)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done,
    .eng_start, .eng_done, .cfg, .layer
  );

  logic [$clog2(AWORDS)-1:0] e_araddr, e_awaddr;
  logic [LANES*8-1:0]        a_rdata, e_awdata;
  logic                      e_awe;
  logic [$clog2(WWORDS)-1:0] e_wraddr;
  logic [LANES*ICP*8-1:0]    w_rdata;
  logic [$clog2(PWORDS)-1:0] e_praddr;
  qparam_t [LANES-1:0]       p_rdata;
  logic                      e_cwe;
  logic [$clog2(PIXELS)-1:0] e_cwaddr;
  logic [$clog2(NCLS)-1:0]   e_cwdata;

  layer_engine #(.LANES(LANES), .ICP(ICP), .NCLS(NCLS), .AWORDS(AWORDS), .WWORDS(WWORDS),
                 .PWORDS(PWORDS), .PIXELS(PIXELS)) u_eng (
    .clk, .rst_n, .start(eng_start), .cfg, .busy(eng_busy), .done(eng_done),
    .act_raddr(e_araddr), .act_rdata(a_rdata),
    .act_we(e_awe), .act_waddr(e_awaddr), .act_wdata(e_awdata),
    .w_raddr(e_wraddr), .w_rdata(w_rdata),
    .p_raddr(e_praddr), .p_rdata(p_rdata),
    .cls_we(e_cwe), .cls_waddr(e_cwaddr), .cls_wdata(e_cwdata)
  );

  // Feature-map write port: the engine while running, the host otherwise.
  logic                      a_we;
  logic [$clog2(AWORDS)-1:0] a_waddr;
  logic [LANES-1:0]          a_wstrb;
  logic [LANES*8-1:0]        a_wdata;
  always_comb begin
    if (busy) begin
      a_we    = e_awe;
      a_waddr = e_awaddr;
      a_wstrb = '1;
      a_wdata = e_awdata;
    end else begin
      a_we    = in_we;
      a_waddr = $clog2(AWORDS)'(in_addr / LANES);
      a_wstrb = LANES'(1) << LB'(in_addr % LANES);
      a_wdata = {LANES{in_data}};
    end
  end

  act_mem #(.WORDS(AWORDS), .LANES(LANES)) u_act (
    .clk, .raddr(e_araddr), .rdata(a_rdata),
    .we(a_we), .waddr(a_waddr), .wstrb(a_wstrb), .wdata(a_wdata)
  );

  weight_mem #(.WORDS(WWORDS), .LANES(LANES), .ICP(ICP)) u_w (
    .clk, .raddr(e_wraddr), .rdata(w_rdata),
    .we(w_we && !busy), .waddr(w_addr), .wdata(w_data)
  );

  qparam_mem #(.WORDS(PWORDS), .LANES(LANES)) u_p (
    .clk, .raddr(e_praddr), .rdata(p_rdata),
    .we(p_we && !busy), .widx(p_idx), .wdata(p_data)
  );

  class_map_mem #(.PIXELS(PIXELS), .NCLS(NCLS)) u_map (
    .clk, .we(e_cwe), .waddr(e_cwaddr), .wdata(e_cwdata),
    .raddr(map_addr), .rdata(map_class)
  );

  // Run-time counter: cycles from `start` to `done`.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     cycles <= '0;
    else if (start && !busy) cycles <= 32'd1;
    else if (busy)  cycles <= cycles + 32'd1;
  end

  // Parameters the datapath relies on.
  initial begin
    assert (LANES > 0 && (LANES & (LANES - 1)) == 0) else $error("LANES must be a power of two");
    assert (C0 % LANES == 0) else $error("C0 = CBASE/F must be a multiple of LANES");
    assert (IMG % (1 << NB) == 0) else $error("IMG must be divisible by 2^NB");
    assert (NCLS <= LANES) else $error("NCLS must not exceed LANES");
    assert (ICP > 0 && (ICP & (ICP - 1)) == 0 && LANES % ICP == 0)
      else $error("ICP must be a power of two dividing LANES");
  end

  // The engine only runs under the sequencer.
  assert property (@(posedge clk) disable iff (!rst_n) eng_busy |-> busy)
    else $error("tiny_unet_top: engine running outside a network run");

  // The host must not write the memories while the network runs.
  assert property (@(posedge clk) disable iff (!rst_n) busy |-> !(in_we || w_we || p_we))
    else $error("tiny_unet_top: host write while busy");
endmodule
