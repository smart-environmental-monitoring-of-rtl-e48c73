// unet_pkg -- types, sizes and the layer schedule of the Tiny U-Net accelerator.
//
// The network is a U-Net cut down along two axes: NB convolution blocks in the
// encoder and NB in the decoder (the full U-Net has 4), and CBASE/F channels in
// the first block (the full U-Net has 64, F=1), doubling at every level down.
// The main configuration is NB=2, F=4: 9 radar channels in, 16/32 channels in
// the two encoder levels, 64 in the bottleneck, 11 thickness classes out.
// The engine consumes ICP input channels per cycle, so the input cube is
// stored with its channel count rounded up to a multiple of ICP (9 -> 16 for
// ICP = 8); the extra channels meet zero weights.
//
// layer_desc() walks that network and returns, for layer i, one descriptor
// (operation, sizes, feature-map addresses, weight and parameter addresses).
// The same walk gives the memory sizes, so the schedule, the weight layout and
// the buffer allocation cannot drift apart.  Layer order, kernel sizes and
// channel counts follow the paper's architecture figure; the memory layout
// (HWC byte order, two ping-pong regions plus one skip region per encoder
// level) is this design's own choice.
package unet_pkg;

  // Kind of work a layer does.
  //   OP_CONV3  : 3x3 convolution, stride 1, zero padding 1, folded BN, ReLU
  //   OP_TCONV2 : 2x2 transposed convolution, stride 2 (upsampling)
  //   OP_CONV1  : 1x1 convolution followed by a per-pixel arg-max (classifier)
  //   OP_POOL   : 2x2 max pooling, stride 2
  typedef enum logic [1:0] {OP_CONV3, OP_TCONV2, OP_CONV1, OP_POOL} op_e;

  // One layer of the schedule.  h/w are the OUTPUT height and width.
  // Input pixel p, channel c of a tensor at base B with C channels lives at
  // byte B + p*C + c.  A concatenated input has cin_a channels at src_a
  // (the skip tensor) followed by cin_b channels at src_b (the upsampled one).
  typedef struct packed {
    op_e         op;
    logic        relu;
    logic        argmax;
    logic [15:0] h;
    logic [15:0] w;
    logic [15:0] cin_a;
    logic [15:0] cin_b;
    logic [15:0] cout;
    logic [31:0] src_a;
    logic [31:0] src_b;
    logic [31:0] dst;
    logic [31:0] w_base;   // weight-memory word address
    logic [31:0] p_base;   // parameter-memory word address
  } layer_t;

  // Per-output-channel requantisation parameters (bias and batch norm folded):
  //   y = sat8( round( (acc + bias) * mult / 2^shift ) ), then ReLU if enabled.
  typedef struct packed {
    logic signed [31:0] bias;
    logic        [15:0] mult;
    logic        [5:0]  shift;
  } qparam_t;

  function automatic int imax(int a, int b);
    return (a > b) ? a : b;
  endfunction

  function automatic int ceil_div(int a, int b);
    return (a + b - 1) / b;
  endfunction

  function automatic int num_layers(int nb);
    return 6 * nb + 3;
  endfunction

  // Input channels as stored: rounded up to a multiple of icp.
  function automatic int cin_pad(int cin, int icp);
    return ceil_div(cin, icp) * icp;
  endfunction

  // Size of each of the two ping-pong regions, in bytes (cin already padded).
  function automatic int region_bytes(int h0, int cin, int c0);
    return h0 * h0 * imax(cin, c0);
  endfunction

  // Byte address of the skip tensor kept for encoder level l.
  function automatic int skip_base(int l, int h0, int cin, int c0);
    int a;
    a = 2 * region_bytes(h0, cin, c0);
    for (int j = 0; j < l; j++) a += (h0 * h0 * c0) >> j;
    return a;
  endfunction

  // Feature-map memory needed, in bytes.
  function automatic int act_bytes(int h0, int cin, int c0, int nb);
    return skip_base(nb, h0, cin, c0);
  endfunction

  function automatic int taps_of(op_e op);
    case (op)
      OP_CONV3: return 9;
      OP_TCONV2: return 4;
      OP_CONV1: return 1;
      default:  return 0;
    endcase
  endfunction

  function automatic layer_t mk(op_e op, bit relu, bit am, int h, int w, int cina, int cinb,
                                int cout, int sa, int sb, int d, int wb, int pb);
    layer_t L;
    L.op = op;      L.relu = relu;  L.argmax = am;
    L.h = 16'(h);   L.w = 16'(w);
    L.cin_a = 16'(cina); L.cin_b = 16'(cinb); L.cout = 16'(cout);
    L.src_a = 32'(sa); L.src_b = 32'(sb); L.dst = 32'(d);
    L.w_base = 32'(wb); L.p_base = 32'(pb);
    return L;
  endfunction

  // Descriptor of layer i.  For i == num_layers(nb) it returns an empty
  // descriptor whose w_base / p_base are the total weight / parameter words.
  // cin must already be padded (cin_pad).  Weight words are counted in
  // groups of icp input channels.
  function automatic layer_t layer_desc(int i, int h0, int cin, int c0, int nb, int ncls,
                                        int lanes, int icp);
    layer_t L;
    int k, cur, oth, c, h, wb, pb, ra, rb, co;
    ra = 0;
    rb = region_bytes(h0, cin, c0);
    k = 0; cur = ra; c = cin; h = h0; wb = 0; pb = 0;
    // encoder: two 3x3 convs, keep the result as skip tensor, pool it
    for (int l = 0; l < nb; l++) begin
      co = c0 << l;
      oth = (cur == ra) ? rb : ra;
      L = mk(OP_CONV3, 1, 0, h, h, c, 0, co, cur, 0, oth, wb, pb);
      if (k == i) return L;
      wb += ceil_div(co, lanes) * 9 * (c / icp); pb += ceil_div(co, lanes); k++;
      cur = oth; c = co;
      L = mk(OP_CONV3, 1, 0, h, h, c, 0, co, cur, 0, skip_base(l, h0, cin, c0), wb, pb);
      if (k == i) return L;
      wb += ceil_div(co, lanes) * 9 * (c / icp); pb += ceil_div(co, lanes); k++;
      L = mk(OP_POOL, 0, 0, h / 2, h / 2, c, 0, c, skip_base(l, h0, cin, c0), 0, ra, wb, pb);
      if (k == i) return L;
      k++;
      cur = ra; h = h / 2;
    end
    // bottleneck: two 3x3 convs
    for (int r = 0; r < 2; r++) begin
      co = c0 << nb;
      oth = (cur == ra) ? rb : ra;
      L = mk(OP_CONV3, 1, 0, h, h, c, 0, co, cur, 0, oth, wb, pb);
      if (k == i) return L;
      wb += ceil_div(co, lanes) * 9 * (c / icp); pb += ceil_div(co, lanes); k++;
      cur = oth; c = co;
    end
    // decoder: upsample, concatenate with skip, two 3x3 convs
    for (int l = nb - 1; l >= 0; l--) begin
      co = c0 << l;
      oth = (cur == ra) ? rb : ra;
      L = mk(OP_TCONV2, 0, 0, h * 2, h * 2, c, 0, co, cur, 0, oth, wb, pb);
      if (k == i) return L;
      wb += ceil_div(co, lanes) * 4 * (c / icp); pb += ceil_div(co, lanes); k++;
      cur = oth; c = co; h = h * 2;
      oth = (cur == ra) ? rb : ra;
      L = mk(OP_CONV3, 1, 0, h, h, c, c, co, skip_base(l, h0, cin, c0), cur, oth, wb, pb);
      if (k == i) return L;
      wb += ceil_div(co, lanes) * 9 * (2 * c / icp); pb += ceil_div(co, lanes); k++;
      cur = oth;
      oth = (cur == ra) ? rb : ra;
      L = mk(OP_CONV3, 1, 0, h, h, c, 0, co, cur, 0, oth, wb, pb);
      if (k == i) return L;
      wb += ceil_div(co, lanes) * 9 * (c / icp); pb += ceil_div(co, lanes); k++;
      cur = oth;
    end
    // classifier: 1x1 conv to ncls logits, arg-max per pixel
    L = mk(OP_CONV1, 0, 1, h, h, c, 0, ncls, cur, 0, 0, wb, pb);
    if (k == i) return L;
    wb += ceil_div(ncls, lanes) * (c / icp); pb += ceil_div(ncls, lanes); k++;
    return mk(OP_POOL, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, wb, pb);
  endfunction

  function automatic int weight_words(int h0, int cin, int c0, int nb, int ncls, int lanes,
                                     int icp);
    layer_t L;
    L = layer_desc(num_layers(nb), h0, cin, c0, nb, ncls, lanes, icp);
    return int'(L.w_base);
  endfunction

  function automatic int param_words(int h0, int cin, int c0, int nb, int ncls, int lanes,
                                    int icp);
    layer_t L;
    L = layer_desc(num_layers(nb), h0, cin, c0, nb, ncls, lanes, icp);
    return int'(L.p_base);
  endfunction

  // Issue cycles the layer engine spends on one layer (one operand, i.e. icp
  // input channels of one tap, per cycle).
  function automatic longint layer_cycles(layer_t L, int lanes, int icp);
    longint px, ng;
    px = longint'(L.h) * longint'(L.w);
    ng = longint'(ceil_div(int'(L.cout), lanes));
    if (L.op == OP_POOL) return px * ng * 4;
    return px * ng * taps_of(L.op == OP_TCONV2 ? OP_CONV1 : L.op)
           * ((longint'(L.cin_a) + longint'(L.cin_b)) / longint'(icp));
  endfunction

endpackage
