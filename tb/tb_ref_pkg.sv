// tb_ref_pkg: behavioural reference model of the detector for the testbenches.
//
// Works on whole feature maps held in flat dynamic arrays, index
// (y*W + x)*C + c, and follows the network's equations directly, without the
// hardware's scheduling or its factored evaluation order:
//   W1A8 layer : acc_o = sum over (ky,kx,i) of s * (m_i * a)          (eq. 3-4)
//   Conv1      : acc_o = sum of w * pixel + bias * 2^5                 (19 frac bits)
//   post       : q = clip(floor((acc*div + bias*2^(SHIFT-8)) / 2^SHIFT + 1/2), 0, 255)
//   max-pool   : maximum of each 2x2 block
//   Conv11     : raw = sat32(round((sum w * (m_i*a) + b*2^15) / 2^12))
// Parameter values come from bnn_pkg's generator functions, the same values
// the ROMs hold.
package tb_ref_pkg;
  import bnn_pkg::*;

  typedef int fmap_t[];

  // floor(v / 2^s) for signed v
  function automatic longint fdiv2(longint v, int s);
    longint d;
    d = longint'(1) << s;
    if (v >= 0) return v / d;
    return -((-v + d - 1) / d);
  endfunction

  function automatic int ref_post(longint acc, int unsigned div, int bias, int shift);
    longint t, r;
    t = acc * longint'(div) + longint'(bias) * (longint'(1) << (shift - QB_FRAC));
    r = fdiv2(t + (longint'(1) << (shift - 1)), shift);
    if (r < 0) return 0;
    if (r > 255) return 255;
    return int'(r);
  endfunction

  // one convolution layer (Conv1..Conv10) incl. post-process and optional pool
  function automatic fmap_t ref_layer(int unsigned l, int H, int W, fmap_t in);
    layer_cfg_t c;
    fmap_t o, p;
    int K, P, CI, CO;
    byte sgn[];
    int  wt[];
    int  mul[];
    c  = layer_cfg(l);
    K  = int'(c.k);
    P  = (K == 3) ? 1 : 0;
    CI = int'(c.cin);
    CO = int'(c.cout);
    sgn = new[CO * K * K * CI];
    wt  = new[CO * K * K * CI];
    mul = new[CI];
    for (int i = 0; i < CI; i++) mul[i] = int'(gen_mul(l, i));
    for (int oc = 0; oc < CO; oc++)
      for (int j = 0; j < K*K*CI; j++) begin
        if (c.binary) sgn[oc*K*K*CI + j] = gen_sign(l, oc, j) ? 8'sd1 : -8'sd1;
        else          wt[oc*K*K*CI + j]  = int'($signed(gen_stdw(l, oc, j)));
      end
    o = new[H * W * CO];
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        for (int oc = 0; oc < CO; oc++) begin
          longint acc;
          acc = 0;
          for (int ky = 0; ky < K; ky++)
            for (int kx = 0; kx < K; kx++) begin
              int yy, xx;
              yy = y + ky - P;
              xx = x + kx - P;
              if (yy < 0 || yy >= H || xx < 0 || xx >= W) continue;
              for (int i = 0; i < CI; i++) begin
                int a, j;
                a = in[(yy*W + xx)*CI + i];
                j = (ky*K + kx)*CI + i;
                if (c.binary) acc += longint'(sgn[oc*K*K*CI + j]) * longint'(mul[i] * a);
                else          acc += longint'(wt[oc*K*K*CI + j] * a);
              end
            end
          if (!c.binary) acc += longint'($signed(gen_stdb(l, oc))) * 32;
          o[(y*W + x)*CO + oc] = ref_post(acc, int'(gen_div(l, oc)), int'($signed(gen_qbias(l, oc))),
                                          c.binary ? W1A8_POST_SHIFT : C1_POST_SHIFT);
        end
    if (!c.pool) return o;
    p = new[(H/2) * (W/2) * CO];
    for (int y = 0; y < H/2; y++)
      for (int x = 0; x < W/2; x++)
        for (int oc = 0; oc < CO; oc++) begin
          int m;
          m = 0;
          for (int dy = 0; dy < 2; dy++)
            for (int dx = 0; dx < 2; dx++)
              if (o[((2*y+dy)*W + 2*x+dx)*CO + oc] > m) m = o[((2*y+dy)*W + 2*x+dx)*CO + oc];
          p[(y*(W/2) + x)*CO + oc] = m;
        end
    return p;
  endfunction

  // detection head on N pixels of 64 channels -> N*75 raw words
  function automatic fmap_t ref_head(int N, fmap_t in);
    fmap_t o;
    int CI, CO;
    CI = int'(layer_cfg(11).cin);
    CO = int'(layer_cfg(11).cout);
    o = new[N * CO];
    for (int n = 0; n < N; n++)
      for (int oc = 0; oc < CO; oc++) begin
        longint acc, r;
        acc = longint'($signed(gen_stdb(11, oc))) * (longint'(1) << 15);
        for (int i = 0; i < CI; i++)
          acc += longint'($signed(gen_stdw(11, oc, i))) * longint'(int'(gen_mul(11, i)) * in[n*CI + i]);
        r = fdiv2(acc + 2048, 12);
        if (r > 64'sd2147483647) r = 64'sd2147483647;
        if (r < -64'sd2147483648) r = -64'sd2147483648;
        o[n*CO + oc] = int'(r);
      end
    return o;
  endfunction

  // whole network: RGB image (H*W*3 bytes, channel 0 = R) -> raw tensor
  function automatic fmap_t ref_net(int H, int W, fmap_t img);
    fmap_t f;
    int h, w;
    f = img;
    h = H;
    w = W;
    for (int unsigned l = 1; l <= 10; l++) begin
      f = ref_layer(l, h, w, f);
      if (layer_cfg(l).pool) begin
        h = h / 2;
        w = w / 2;
      end
    end
    return ref_head(h * w, f);
  endfunction

  // deterministic test image
  function automatic fmap_t gen_image(int H, int W, int seed);
    fmap_t img;
    img = new[H * W * 3];
    for (int i = 0; i < H * W * 3; i++) img[i] = int'(prand(32'd77 + seed, i) & 32'hFF);
    return img;
  endfunction
endpackage
