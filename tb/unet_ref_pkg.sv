// unet_ref_pkg -- golden model of the quantised Tiny U-Net for the testbenches.
//
// unet_ref builds the network from its own description (NB encoder blocks of
// two 3x3 convs + 2x2 max pool, a two-conv bottleneck, NB decoder blocks of a
// 2x2 transposed conv, concatenation [skip, upsampled] and two 3x3 convs, and
// a 1x1 classifier with arg-max), draws random int8 weights, biases and
// requantisation factors, packs them into the accelerator's memory layout, and
// computes the expected class map with plain nested loops over whole tensors.
// It shares no code with the RTL: only the documented layouts (HWC feature
// maps, the input with its channels padded to a multiple of ICP; weight word =
// LANES output channels x ICP input channels of one tap, in the order group,
// tap, input-channel group; one parameter entry per output channel in group
// order) and the documented arithmetic are common to both.
package unet_ref_pkg;

  localparam int OP_C3 = 0, OP_TC = 1, OP_C1 = 2, OP_MP = 3;

  class unet_ref #(int LANES = 16, int ICP = 8);
    typedef logic [LANES*ICP*8-1:0] word_t;

    int img, cin, c0, nb, ncls;

    // per-layer description
    int l_op[$], l_cin[$], l_cout[$], l_relu[$];
    int wt[$][];            // weights per layer, index (oc*cin + ic)*taps + tap
    int bias[$][], mult[$][], shift[$][];

    word_t wwords[$];       // packed weight memory image
    int    p_bias[$], p_mult[$], p_shift[$];   // flat parameter entries

    int in_cube[];          // HWC, img*img*cin
    int out_map[];          // expected class per pixel

    // mechanism counters of the reference run
    longint n_relu_clip, n_sat, n_pad_taps, n_pool, n_tconv, n_concat, n_convs;

    function new(int img, int cin, int c0, int nb, int ncls);
      this.img = img; this.cin = cin; this.c0 = c0; this.nb = nb; this.ncls = ncls;
    endfunction

    function int taps(int op);
      return (op == OP_C3) ? 9 : (op == OP_TC) ? 4 : (op == OP_C1) ? 1 : 0;
    endfunction

    function void add_layer(int op, int ci, int co, int relu);
      l_op.push_back(op); l_cin.push_back(ci); l_cout.push_back(co); l_relu.push_back(relu);
    endfunction

    // network structure
    function void build();
      int c;
      c = cin;
      for (int l = 0; l < nb; l++) begin
        add_layer(OP_C3, c, c0 << l, 1);
        add_layer(OP_C3, c0 << l, c0 << l, 1);
        add_layer(OP_MP, c0 << l, c0 << l, 0);
        c = c0 << l;
      end
      add_layer(OP_C3, c, c0 << nb, 1);
      add_layer(OP_C3, c0 << nb, c0 << nb, 1);
      c = c0 << nb;
      for (int l = nb - 1; l >= 0; l--) begin
        add_layer(OP_TC, c, c0 << l, 0);
        add_layer(OP_C3, 2 * (c0 << l), c0 << l, 1);
        add_layer(OP_C3, c0 << l, c0 << l, 1);
        c = c0 << l;
      end
      add_layer(OP_C1, c, ncls, 0);
    endfunction

    // random weights, parameters and input, packed into memory images
    function void randomise(int wmax, int mult_lo, int mult_hi, int sh, int bias_max);
      int n, nt, ng, o;
      word_t wd;
      build();
      for (int k = 0; k < l_op.size(); k++) begin
        int w_a[], b_a[], m_a[], s_a[];
        nt = taps(l_op[k]);
        n  = l_cout[k] * l_cin[k] * nt;
        w_a = new[n]; b_a = new[l_cout[k]]; m_a = new[l_cout[k]]; s_a = new[l_cout[k]];
        for (int i = 0; i < n; i++) w_a[i] = int'($urandom_range(2 * wmax, 0)) - wmax;
        for (int i = 0; i < l_cout[k]; i++) begin
          b_a[i] = int'($urandom_range(2 * bias_max, 0)) - bias_max;
          m_a[i] = int'($urandom_range(mult_hi, mult_lo));
          s_a[i] = sh;
        end
        wt.push_back(w_a); bias.push_back(b_a); mult.push_back(m_a); shift.push_back(s_a);
        if (l_op[k] == OP_MP) continue;
        ng = (l_cout[k] + LANES - 1) / LANES;
        for (int g = 0; g < ng; g++) begin
          for (int t = 0; t < nt; t++)
            for (int icg = 0; icg < (l_cin[k] + ICP - 1) / ICP; icg++) begin
              wd = '0;
              for (int l = 0; l < LANES; l++)
                for (int j = 0; j < ICP; j++) begin
                  int ic;
                  o = g * LANES + l;
                  ic = icg * ICP + j;
                  if (o < l_cout[k] && ic < l_cin[k])
                    wd[(l * ICP + j)*8 +: 8] = 8'(w_a[(o * l_cin[k] + ic) * nt + t]);
                end
              wwords.push_back(wd);
            end
          for (int l = 0; l < LANES; l++) begin
            o = g * LANES + l;
            p_bias.push_back(o < l_cout[k] ? b_a[o] : 0);
            p_mult.push_back(o < l_cout[k] ? m_a[o] : 0);
            p_shift.push_back(o < l_cout[k] ? s_a[o] : 0);
          end
        end
      end
      in_cube = new[img * img * cin];
      foreach (in_cube[i]) in_cube[i] = int'($urandom_range(255, 0)) - 128;
    endfunction

    // accelerator byte address of input element i (= p*cin + c)
    function int in_addr(int i);
      return (i / cin) * ((cin + ICP - 1) / ICP * ICP) + i % cin;
    endfunction

    function int rq(longint acc, int b, int m, int s, int relu);
      longint t;
      t = (acc + b) * m;
      if (s > 0) t += longint'(1) <<< (s - 1);
      t = t >>> s;
      if (relu && t < 0) begin t = 0; n_relu_clip++; end
      if (t > 127) begin t = 127; n_sat++; end
      if (t < -128) begin t = -128; n_sat++; end
      return int'(t);
    endfunction

    function void conv3(ref int src[], input int h, int k, ref int dst[]);
      int ci, co, iy, ix;
      longint acc;
      ci = l_cin[k]; co = l_cout[k];
      dst = new[h * h * co];
      n_convs++;
      for (int y = 0; y < h; y++)
        for (int x = 0; x < h; x++)
          for (int o = 0; o < co; o++) begin
            acc = 0;
            for (int ky = 0; ky < 3; ky++)
              for (int kx = 0; kx < 3; kx++) begin
                iy = y + ky - 1; ix = x + kx - 1;
                if (iy < 0 || ix < 0 || iy >= h || ix >= h) begin
                  if (o == 0) n_pad_taps++;
                  continue;
                end
                for (int i = 0; i < ci; i++)
                  acc += longint'(src[(iy * h + ix) * ci + i]) * wt[k][(o * ci + i) * 9 + ky * 3 + kx];
              end
            dst[(y * h + x) * co + o] = rq(acc, bias[k][o], mult[k][o], shift[k][o], l_relu[k]);
          end
    endfunction

    function void pool(ref int src[], input int h, int c, ref int dst[]);
      int hh, v, m;
      hh = h / 2;
      dst = new[hh * hh * c];
      n_pool++;
      for (int y = 0; y < hh; y++)
        for (int x = 0; x < hh; x++)
          for (int o = 0; o < c; o++) begin
            m = -1000;
            for (int dy = 0; dy < 2; dy++)
              for (int dx = 0; dx < 2; dx++) begin
                v = src[((2 * y + dy) * h + 2 * x + dx) * c + o];
                if (v > m) m = v;
              end
            dst[(y * hh + x) * c + o] = m;
          end
    endfunction

    function void tconv(ref int src[], input int h, int k, ref int dst[]);
      int ci, co, hh;
      longint acc;
      ci = l_cin[k]; co = l_cout[k]; hh = 2 * h;
      dst = new[hh * hh * co];
      n_tconv++;
      for (int y = 0; y < hh; y++)
        for (int x = 0; x < hh; x++)
          for (int o = 0; o < co; o++) begin
            acc = 0;
            for (int i = 0; i < ci; i++)
              acc += longint'(src[((y / 2) * h + x / 2) * ci + i])
                     * wt[k][(o * ci + i) * 4 + (y % 2) * 2 + (x % 2)];
            dst[(y * hh + x) * co + o] = rq(acc, bias[k][o], mult[k][o], shift[k][o], 0);
          end
    endfunction

    function void concat(ref int a[], ref int b[], input int px, int ca, int cb, ref int dst[]);
      dst = new[px * (ca + cb)];
      n_concat++;
      for (int p = 0; p < px; p++) begin
        for (int i = 0; i < ca; i++) dst[p * (ca + cb) + i] = a[p * ca + i];
        for (int i = 0; i < cb; i++) dst[p * (ca + cb) + ca + i] = b[p * cb + i];
      end
    endfunction

    function void classify(ref int src[], input int h, int k);
      longint acc, best;
      int ci, cls;
      ci = l_cin[k];
      out_map = new[h * h];
      for (int p = 0; p < h * h; p++) begin
        cls = 0;
        for (int o = 0; o < ncls; o++) begin
          acc = bias[k][o];
          for (int i = 0; i < ci; i++) acc += longint'(src[p * ci + i]) * wt[k][o * ci + i];
          if (o == 0 || acc > best) begin best = acc; cls = o; end
        end
        out_map[p] = cls;
      end
    endfunction

    // the whole network
    function void run();
      int cur[], tmp[], cat[];
      int skips[$][];
      int h, k;
      k = 0; h = img;
      cur = in_cube;
      for (int l = 0; l < nb; l++) begin
        conv3(cur, h, k, tmp); k++;
        conv3(tmp, h, k, cur); k++;
        skips.push_back(cur);
        pool(cur, h, l_cout[k], tmp); k++;
        cur = tmp; h = h / 2;
      end
      conv3(cur, h, k, tmp); k++;
      conv3(tmp, h, k, cur); k++;
      for (int l = nb - 1; l >= 0; l--) begin
        tconv(cur, h, k, tmp); h = 2 * h;
        concat(skips[l], tmp, h * h, l_cout[k], l_cout[k], cat); k++;
        conv3(cat, h, k, tmp); k++;
        conv3(tmp, h, k, cur); k++;
      end
      classify(cur, h, k);
    endfunction

    // multiply-accumulate operations of the whole network
    function longint macs();
      longint m;
      int h;
      m = 0; h = img;
      for (int k = 0; k < l_op.size(); k++) begin
        case (l_op[k])
          OP_C3: m += longint'(h) * h * l_cin[k] * l_cout[k] * 9;
          OP_C1: m += longint'(h) * h * l_cin[k] * l_cout[k];
          OP_TC: begin h = 2 * h; m += longint'(h) * h * l_cin[k] * l_cout[k]; end
          OP_MP: h = h / 2;
          default: ;
        endcase
      end
      return m;
    endfunction
  endclass

endpackage
