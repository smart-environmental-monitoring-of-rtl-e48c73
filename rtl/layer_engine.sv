// layer_engine -- runs one layer of the Tiny U-Net over the on-chip memories.
//
// The engine walks the output tensor pixel by pixel (row-major), and for each
// pixel channel group by channel group (LANES output channels per group).  For
// a convolution it then feeds one operand per cycle to the MAC lanes: ICP
// consecutive input channels of one tap.  The ICP activation bytes are
// broadcast, each lane gets its own ICP weight bytes, and weight words are
// read in the order they are stored.  Input channel counts (cin_a, cin_b)
// must be multiples of ICP, and LANES a multiple of ICP, so the ICP bytes
// always sit in one memory word.
//   OP_CONV3  : 9 taps x (cin_a + cin_b)/ICP cycles per group; taps that fall
//               outside the image read zero (zero padding 1).
//   OP_TCONV2 : cin_a/ICP cycles per group; output pixel (y,x) takes input
//               pixel (y/2, x/2) and the kernel tap (y%2, x%2).
//   OP_CONV1  : cin_a/ICP cycles per group, then arg-max instead of a write-back.
//   OP_POOL   : 4 cycles per group, each reading a whole word (LANES channels)
//               of the 2x2 window.
// Pipeline: issue (addresses to the memories) -> s1 (read data, MAC / max) ->
// s2 (sums final: requantise or arg-max) -> s3 (registered write).  The
// memory write lands one cycle after s3.  A layer of N issue cycles raises
// `done` for one cycle N+4 cycles after the `start` cycle, with the last write
// already in memory.  `cfg` must stay stable while `busy`.
//
// The set of operations and their kernel sizes are the paper's (architecture
// figure: conv 3x3 + BN + ReLU, max pool 2x2, transposed conv 2x2, conv 1x1,
// copy/concatenate).  The loop order, the one-operand-per-cycle schedule and
// the output- and input-channel parallelism are this design's own.
module layer_engine #(
  parameter int LANES  = 16,
  parameter int ICP    = 8,
  parameter int NCLS   = 11,
  parameter int AWORDS = 57344,
  parameter int WWORDS = 928,
  parameter int PWORDS = 25,
  parameter int PIXELS = 16384
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             start,
  input  unet_pkg::layer_t                 cfg,
  output logic                             busy,
  output logic                             done,
  // feature-map memory
  output logic [$clog2(AWORDS)-1:0]        act_raddr,
  input  logic [LANES*8-1:0]               act_rdata,
  output logic                             act_we,
  output logic [$clog2(AWORDS)-1:0]        act_waddr,
  output logic [LANES*8-1:0]               act_wdata,
  // weights and per-channel parameters
  output logic [$clog2(WWORDS)-1:0]        w_raddr,
  input  logic [LANES*ICP*8-1:0]           w_rdata,
  output logic [$clog2(PWORDS)-1:0]        p_raddr,
  input  unet_pkg::qparam_t [LANES-1:0]    p_rdata,
  // estimation map
  output logic                             cls_we,
  output logic [$clog2(PIXELS)-1:0]        cls_waddr,
  output logic [$clog2(NCLS)-1:0]          cls_wdata
);
  import unet_pkg::*;

  localparam int LB = (LANES > 1) ? $clog2(LANES) : 1;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state;

  // loop counters
  logic [15:0] oy, ox, g, t, ic;
  logic [15:0] nt, ncin, ng;
  logic        is_pool, is_tconv;

  assign is_pool  = (cfg.op == OP_POOL);
  assign is_tconv = (cfg.op == OP_TCONV2);
  assign nt   = (cfg.op == OP_CONV3) ? 16'd9 : (is_pool ? 16'd4 : 16'd1);
  assign ncin = is_pool ? 16'd1 : (cfg.cin_a + cfg.cin_b) / 16'(ICP);
  assign ng   = (cfg.cout + 16'(LANES) - 16'd1) / 16'(LANES);

  logic last_ic, last_t, last_g, last_ox, last_oy, last_issue;
  assign last_ic    = (ic == ncin - 16'd1);
  assign last_t     = (t == nt - 16'd1);
  assign last_g     = (g == ng - 16'd1);
  assign last_ox    = (ox == cfg.w - 16'd1);
  assign last_oy    = (oy == cfg.h - 16'd1);
  assign last_issue = last_ic && last_t && last_g && last_ox && last_oy;

  // ---------------------------------------------------------------- issue
  logic issue;
  assign issue = (state == S_RUN);

  logic signed [17:0] iy, ix;
  logic [15:0]        win, hin;
  logic               pad;
  logic [1:0]         wtap;
  always_comb begin
    win  = cfg.w;
    hin  = cfg.h;
    wtap = '0;
    iy   = 18'(oy);
    ix   = 18'(ox);
    case (cfg.op)
      OP_CONV3: begin
        iy = $signed(18'(oy)) + $signed(18'(t / 16'd3)) - 18'sd1;
        ix = $signed(18'(ox)) + $signed(18'(t % 16'd3)) - 18'sd1;
      end
      OP_TCONV2: begin
        win  = cfg.w >> 1;
        hin  = cfg.h >> 1;
        iy   = 18'(oy >> 1);
        ix   = 18'(ox >> 1);
        wtap = {oy[0], ox[0]};
      end
      OP_POOL: begin
        win = cfg.w << 1;
        hin = cfg.h << 1;
        iy  = 18'({oy, 1'b0} | 17'(t[1]));
        ix  = 18'({ox, 1'b0} | 17'(t[0]));
      end
      default: ;
    endcase
    pad = (iy < 0) || (ix < 0) || (iy >= $signed(18'(hin))) || (ix >= $signed(18'(win)));
  end

  logic [31:0] pix_in;
  assign pix_in = pad ? 32'd0 : (32'(iy[15:0]) * 32'(win) + 32'(ix[15:0]));

  logic [31:0] src_byte;
  concat_addr u_cat (
    .pix(pix_in), .ch(is_pool ? 16'(g * 16'(LANES)) : 16'(ic * 16'(ICP))),
    .cin_a(cfg.cin_a), .cin_b(cfg.cin_b),
    .base_a(cfg.src_a), .base_b(cfg.src_b), .addr(src_byte)
  );

  logic [31:0] tap_idx;
  assign tap_idx = is_tconv ? 32'(wtap) : 32'(t);
  assign act_raddr = $clog2(AWORDS)'(src_byte / LANES);
  assign w_raddr   = $clog2(WWORDS)'(cfg.w_base
                     + ((32'(g) * (is_tconv ? 32'd4 : 32'(nt)) + tap_idx) * 32'(ncin)) + 32'(ic));
  assign p_raddr   = $clog2(PWORDS)'(cfg.p_base + 32'(g));

  logic [31:0] pix_out, dst_byte;
  assign pix_out  = 32'(oy) * 32'(cfg.w) + 32'(ox);
  assign dst_byte = cfg.dst + pix_out * 32'(cfg.cout) + 32'(g) * 32'(LANES);

  // ---------------------------------------------------------------- s1
  logic                         s1_v, s1_first, s1_last, s1_pad, s1_pool;
  logic [LB-1:0]                s1_lane;
  logic [$clog2(AWORDS)-1:0]    s1_dst;
  logic [$clog2(PIXELS)-1:0]    s1_pix;

  logic [ICP*8-1:0] a_vec;
  assign a_vec = s1_pad ? '0 : act_rdata[32'(s1_lane)*8 +: ICP*8];

  logic signed [31:0] acc [LANES];
  mac_array #(.LANES(LANES), .ICP(ICP), .ACCW(32)) u_mac (
    .clk, .en(s1_v && !s1_pool), .first(s1_first), .a(a_vec), .w(w_rdata), .acc
  );

  logic [LANES*8-1:0] pool_out;
  maxpool #(.LANES(LANES)) u_pool (
    .clk, .en(s1_v && s1_pool), .first(s1_first), .din(act_rdata), .dout(pool_out)
  );

  // ---------------------------------------------------------------- s2
  logic                         s2_v, s2_pool;
  logic [$clog2(AWORDS)-1:0]    s2_dst;
  logic [$clog2(PIXELS)-1:0]    s2_pix;
  qparam_t [LANES-1:0]          s2_qp;

  logic [LANES*8-1:0] rq_out;
  requant #(.LANES(LANES), .ACCW(32)) u_rq (.acc, .qp(s2_qp), .relu(cfg.relu), .y(rq_out));

  logic signed [31:0]       logit [LANES];
  logic [$clog2(NCLS)-1:0]  cls;
  always_comb
    for (int l = 0; l < LANES; l++) logit[l] = acc[l] + s2_qp[l].bias;
  argmax #(.LANES(LANES), .NCLS(NCLS), .W(32)) u_am (.logit, .cls);

  // ---------------------------------------------------------------- sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      oy <= '0; ox <= '0; g <= '0; t <= '0; ic <= '0;
      s1_v <= 1'b0; s2_v <= 1'b0;
      act_we <= 1'b0; cls_we <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state <= S_RUN;
          oy <= '0; ox <= '0; g <= '0; t <= '0; ic <= '0;
        end
        S_RUN: begin
          if (last_issue) state <= S_DRAIN;
          if (!last_ic) ic <= ic + 16'd1;
          else begin
            ic <= '0;
            if (!last_t) t <= t + 16'd1;
            else begin
              t <= '0;
              if (!last_g) g <= g + 16'd1;
              else begin
                g <= '0;
                if (!last_ox) ox <= ox + 16'd1;
                else begin
                  ox <= '0;
                  oy <= oy + 16'd1;
                end
              end
            end
          end
        end
        S_DRAIN: if (!s1_v && !s2_v && !act_we && !cls_we) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase

      // issue -> s1
      s1_v <= issue;
      // s1 -> s2 (only the closing operand of a group moves on)
      s2_v <= s1_v && s1_last;
      // s2 -> s3 (registered write)
      act_we <= s2_v && !cfg.argmax;
      cls_we <= s2_v && cfg.argmax;
    end
  end

  always_ff @(posedge clk) begin
    s1_first <= (t == 16'd0) && (ic == 16'd0);
    s1_last  <= last_ic && last_t;
    s1_pad   <= pad && !is_pool;
    s1_pool  <= is_pool;
    s1_lane  <= LB'(src_byte % LANES);
    s1_dst   <= $clog2(AWORDS)'(dst_byte / LANES);
    s1_pix   <= $clog2(PIXELS)'(pix_out);
    if (s1_v && s1_last) begin
      s2_dst  <= s1_dst;
      s2_pix  <= s1_pix;
      s2_pool <= s1_pool;
      s2_qp   <= p_rdata;
    end
    act_waddr <= s2_dst;
    act_wdata <= s2_pool ? pool_out : rq_out;
    cls_waddr <= s2_pix;
    cls_wdata <= cls;
  end

  assign busy = (state != S_IDLE);

  // Operands must stay inside the memories.
  assert property (@(posedge clk) disable iff (!rst_n)
                   issue |-> (src_byte / LANES) < AWORDS)
    else $error("layer_engine: feature-map read out of range");
  // A new layer may only be started while the engine is idle.
  assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE)
    else $error("layer_engine: start while busy");
endmodule
