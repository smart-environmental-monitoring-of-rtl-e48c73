// tb_layer_engine -- the layer engine with its four memories, run on one layer
// of each kind and checked against a byte-level model of the feature memory:
//   1. 3x3 conv + ReLU on a concatenated input (2 + 4 channels, the first
//      part not a multiple of the lane count), 4x4 image, 8 output channels
//   2. 2x2 transposed conv 8 -> 4 channels, 4x4 -> 8x8, no ReLU
//   3. 2x2 max pool, 8x8 -> 4x4, 4 channels
//   4. 1x1 conv to 3 classes + arg-max, 4x4
// Four output lanes, two input channels per cycle.  Every output byte / class is compared, and `done` must come N+4 cycles after
// the start cycle, N being the layer's operand count.
module tb_layer_engine;
  import unet_pkg::*;
  localparam int LANES = 4, ICP = 2, NCLS = 3, AWORDS = 256, WWORDS = 512, PWORDS = 16, PIXELS = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done;
  layer_t cfg;
  logic [7:0] act_raddr, act_waddr, h_waddr, m_waddr;
  logic [LANES*8-1:0] act_rdata, act_wdata, h_wdata, m_wdata;
  logic act_we, h_we = 0, m_we;
  logic [LANES-1:0] h_wstrb, m_wstrb;
  logic [8:0] w_raddr, hw_addr;
  logic [LANES*ICP*8-1:0] w_rdata, hw_data;
  logic hw_we = 0;
  logic [3:0] p_raddr;
  qparam_t [LANES-1:0] p_rdata;
  logic hp_we = 0;
  logic [5:0] hp_idx;
  qparam_t hp_data;
  logic cls_we;
  logic [5:0] cls_waddr, cls_raddr;
  logic [1:0] cls_wdata, cls_rdata;

  layer_engine #(.LANES(LANES), .ICP(ICP), .NCLS(NCLS), .AWORDS(AWORDS), .WWORDS(WWORDS),
                 .PWORDS(PWORDS), .PIXELS(PIXELS)) dut (.*);

  // host writes while idle, engine writes while busy
  assign m_we    = busy ? act_we : h_we;
  assign m_waddr = busy ? act_waddr : h_waddr;
  assign m_wdata = busy ? act_wdata : h_wdata;
  assign m_wstrb = busy ? '1 : h_wstrb;
  act_mem #(.WORDS(AWORDS), .LANES(LANES)) u_act (
    .clk, .raddr(act_raddr), .rdata(act_rdata), .we(m_we), .waddr(m_waddr),
    .wstrb(m_wstrb), .wdata(m_wdata));
  weight_mem #(.WORDS(WWORDS), .LANES(LANES), .ICP(ICP)) u_w (
    .clk, .raddr(w_raddr), .rdata(w_rdata), .we(hw_we), .waddr(hw_addr), .wdata(hw_data));
  qparam_mem #(.WORDS(PWORDS), .LANES(LANES)) u_p (
    .clk, .raddr(p_raddr), .rdata(p_rdata), .we(hp_we), .widx(hp_idx), .wdata(hp_data));
  class_map_mem #(.PIXELS(PIXELS), .NCLS(NCLS)) u_cls (
    .clk, .we(cls_we), .waddr(cls_waddr), .wdata(cls_wdata), .raddr(cls_raddr),
    .rdata(cls_rdata));

  int checks = 0, failures = 0;
  int img [AWORDS*LANES];         // model of the feature memory (signed bytes)
  int wimg [WWORDS][LANES*ICP];   // weight image, [word][lane*ICP + k]
  int pb [PWORDS*LANES], pm [PWORDS*LANES], ps [PWORDS*LANES];
  int exp_cls [PIXELS];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rq(longint acc, int idx, bit relu);
    longint t;
    t = (acc + pb[idx]) * pm[idx];
    if (ps[idx] > 0) t += longint'(1) <<< (ps[idx] - 1);
    t = t >>> ps[idx];
    if (relu && t < 0) t = 0;
    if (t > 127) t = 127;
    if (t < -128) t = -128;
    return int'(t);
  endfunction

  function automatic int in_ch(layer_t L, int p, int c);
    if (c < L.cin_a) return img[L.src_a + p * L.cin_a + c];
    return img[L.src_b + p * L.cin_b + c - L.cin_a];
  endfunction

  // expected result of layer L, written into the model
  function automatic void model(layer_t L);
    int h, w, ci, nt, out [];
    longint acc;
    h = L.h; w = L.w; ci = L.cin_a + L.cin_b;
    out = new[h * w * L.cout];
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++)
        for (int o = 0; o < L.cout; o++) begin
          int g, ln;
          g = o / LANES; ln = o % LANES;
          acc = 0;
          case (L.op)
            OP_CONV3:
              for (int t = 0; t < 9; t++) begin
                int iy, ix;
                iy = y + t / 3 - 1; ix = x + t % 3 - 1;
                if (iy >= 0 && ix >= 0 && iy < h && ix < w)
                  for (int i = 0; i < ci; i++)
                    acc += longint'(in_ch(L, iy * w + ix, i))
                           * wimg[L.w_base + (g * 9 + t) * (ci / ICP) + i / ICP][ln * ICP + i % ICP];
              end
            OP_TCONV2:
              for (int i = 0; i < ci; i++)
                acc += longint'(in_ch(L, (y / 2) * (w / 2) + x / 2, i))
                       * wimg[L.w_base + (g * 4 + (y % 2) * 2 + x % 2) * (ci / ICP) + i / ICP][ln * ICP + i % ICP];
            OP_CONV1:
              for (int i = 0; i < ci; i++)
                acc += longint'(in_ch(L, y * w + x, i)) * wimg[L.w_base + g * (ci / ICP) + i / ICP][ln * ICP + i % ICP];
            default: begin
              acc = -1000;
              for (int t = 0; t < 4; t++) begin
                int v;
                v = in_ch(L, (2 * y + t / 2) * (2 * w) + 2 * x + t % 2, o);
                if (v > acc) acc = v;
              end
            end
          endcase
          if (L.op == OP_POOL) out[(y * w + x) * L.cout + o] = int'(acc);
          else if (L.op == OP_CONV1) out[(y * w + x) * L.cout + o] = int'(acc + pb[L.p_base * LANES + o]);
          else out[(y * w + x) * L.cout + o] = rq(acc, L.p_base * LANES + o, L.relu);
        end
    if (L.argmax) begin
      for (int p = 0; p < h * w; p++) begin
        int b;
        b = 0;
        for (int o = 1; o < L.cout; o++) if (out[p * L.cout + o] > out[p * L.cout + b]) b = o;
        exp_cls[p] = b;
      end
    end else
      foreach (out[i]) img[L.dst + i] = out[i];
  endfunction

  task automatic run_layer(layer_t L, string name);
    int n, cnt, ng, nt;
    cfg = L;
    ng = (L.cout + LANES - 1) / LANES;
    nt = (L.op == OP_CONV3) ? 9 : (L.op == OP_POOL) ? 4 : 1;
    n = L.h * L.w * ng * nt * ((L.op == OP_POOL) ? 1 : (L.cin_a + L.cin_b) / ICP);
    model(L);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cnt = 0;
    while (!done) begin @(negedge clk); cnt++; end
    checks++;
    if (cnt != n + 4) begin
      failures++;
      $display("FAIL %s: done after %0d cycles, expected %0d", name, cnt, n + 4);
    end
    @(negedge clk);
    if (L.argmax) begin
      for (int p = 0; p < L.h * L.w; p++) begin
        cls_raddr = 6'(p);
        @(negedge clk);
        checks++;
        if (int'(cls_rdata) != exp_cls[p]) begin
          failures++;
          $display("FAIL %s pixel %0d: class %0d expected %0d", name, p, cls_rdata, exp_cls[p]);
        end
      end
    end else begin
      for (int i = 0; i < L.h * L.w * L.cout; i++) begin
        int a, got;
        a = L.dst + i;
        got = int'($signed(u_act.mem[a / LANES][(a % LANES) * 8 +: 8]));
        checks++;
        if (got != img[a]) begin
          failures++;
          if (failures < 20) $display("FAIL %s byte %0d: %0d expected %0d", name, i, got, img[a]);
        end
      end
    end
  endtask

  initial begin
    layer_t L;
    h_waddr = 0; h_wdata = 0; h_wstrb = 0; hw_addr = 0; hw_data = 0; hp_idx = 0; hp_data = '0;
    cls_raddr = 0; cfg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // random feature memory, weights and parameters
    for (int i = 0; i < AWORDS * LANES; i++) begin
      img[i] = int'($urandom_range(255)) - 128;
      @(negedge clk); h_we = 1; h_waddr = 8'(i / LANES); h_wstrb = LANES'(1) << (i % LANES);
      h_wdata = {LANES{8'(img[i])}};
    end
    @(negedge clk); h_we = 0;
    for (int i = 0; i < WWORDS; i++) begin
      @(negedge clk); hw_we = 1; hw_addr = 9'(i);
      for (int l = 0; l < LANES * ICP; l++) begin
        wimg[i][l] = int'($urandom_range(15)) - 8;
        hw_data[l*8 +: 8] = 8'(wimg[i][l]);
      end
    end
    @(negedge clk); hw_we = 0;
    for (int i = 0; i < PWORDS * LANES; i++) begin
      pb[i] = int'($urandom_range(2000)) - 1000;
      pm[i] = $urandom_range(4000, 1000);
      ps[i] = 14;
      @(negedge clk); hp_we = 1; hp_idx = 6'(i);
      hp_data.bias = pb[i]; hp_data.mult = 16'(pm[i]); hp_data.shift = 6'(ps[i]);
    end
    @(negedge clk); hp_we = 0;

    //          op        relu am h  w  cina cinb cout src_a src_b dst  wb   pb
    L = mk(OP_CONV3,  1, 0, 4, 4, 2, 4, 8, 0,   64,  256, 0,   0);
    run_layer(L, "conv3+concat");
    L = mk(OP_TCONV2, 0, 0, 8, 8, 8, 0, 4, 256, 0,   512, 200, 2);
    run_layer(L, "tconv2");
    L = mk(OP_POOL,   0, 0, 4, 4, 4, 0, 4, 512, 0,   768, 0,   0);
    run_layer(L, "pool");
    L = mk(OP_CONV1,  0, 1, 4, 4, 4, 0, 3, 768, 0,   0,   300, 3);
    run_layer(L, "conv1+argmax");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
