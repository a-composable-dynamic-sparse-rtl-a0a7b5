// esda_ref_pkg: dense reference model of the sparse network, for testbenches.
//
// A feature map is a dense H x W x C integer array plus a non-zero map. The
// functions below compute submanifold convolution directly from its
// definition (stride 1: outputs exactly at the non-zero inputs; stride 2:
// output (ox,oy) exists when its 2x2 input grid has a non-zero pixel, window
// centred on (2ox, 2oy)), so they share no structure with the streaming
// hardware. Only the weight formula (esda_pkg::wgen/bgen) and the weight
// index layout are common, since they define the network.
package esda_ref_pkg;
  import esda_pkg::wgen;
  import esda_pkg::bgen;

  class fmap;
    int h, w, c;
    bit nz[];
    int f[];
    function new(int h_, int w_, int c_);
      h = h_; w = w_; c = c_;
      nz = new[h * w];
      f  = new[h * w * c];
      foreach (nz[i]) nz[i] = 0;
      foreach (f[i])  f[i]  = 0;
    endfunction
    function int at(int y, int x, int ch);
      return f[(y * w + x) * c + ch];
    endfunction
    function void set(int y, int x, int ch, int v);
      f[(y * w + x) * c + ch] = v;
    endfunction
    function int count_nz();
      int n = 0;
      foreach (nz[i]) n += nz[i];
      return n;
    endfunction
  endclass

  function automatic int q8(longint acc, int shift, bit relu);
    longint s = acc >>> shift;
    if (relu && s < 0) return 0;
    if (s > 127) return 127;
    if (s < -128) return -128;
    return int'(s);
  endfunction

  function automatic int sat8(int v);
    if (v > 127) return 127;
    if (v < -128) return -128;
    return v;
  endfunction

  // k x k submanifold convolution (full or depthwise)
  function automatic fmap conv_kxk(fmap in, int oc, int k, int stride, bit dw,
                                   int seed, int shift, bit relu);
    int ho = (stride == 2) ? (in.h + 1) / 2 : in.h;
    int wo = (stride == 2) ? (in.w + 1) / 2 : in.w;
    int u = (k - 1) / 2;
    fmap o = new(ho, wo, oc);
    for (int oy = 0; oy < ho; oy++) begin
      for (int ox = 0; ox < wo; ox++) begin
        bit active = 0;
        if (stride == 1) active = in.nz[oy * in.w + ox];
        else begin
          for (int gy = 0; gy < 2; gy++)
            for (int gx = 0; gx < 2; gx++)
              if (2*oy+gy < in.h && 2*ox+gx < in.w && in.nz[(2*oy+gy) * in.w + 2*ox+gx]) active = 1;
        end
        if (!active) continue;
        o.nz[oy * wo + ox] = 1;
        for (int co = 0; co < oc; co++) begin
          longint acc = bgen(seed, co);
          for (int dy = 0; dy < k; dy++) begin
            for (int dx = 0; dx < k; dx++) begin
              int iy = stride * oy + dy - u;
              int ix = stride * ox + dx - u;
              int off = dy * k + dx;
              if (iy < 0 || iy >= in.h || ix < 0 || ix >= in.w) continue;
              if (!in.nz[iy * in.w + ix]) continue;
              if (dw) acc += longint'(wgen(seed, co * k * k + off)) * in.at(iy, ix, co);
              else
                for (int ci = 0; ci < in.c; ci++)
                  acc += longint'(wgen(seed, (co * in.c + ci) * k * k + off)) * in.at(iy, ix, ci);
            end
          end
          o.set(oy, ox, co, q8(acc, shift, relu));
        end
      end
    end
    return o;
  endfunction

  function automatic fmap conv1x1(fmap in, int oc, int seed, int shift, bit relu);
    fmap o = new(in.h, in.w, oc);
    for (int p = 0; p < in.h * in.w; p++) begin
      if (!in.nz[p]) continue;
      o.nz[p] = 1;
      for (int co = 0; co < oc; co++) begin
        longint acc = bgen(seed, co);
        for (int ci = 0; ci < in.c; ci++)
          acc += longint'(wgen(seed, co * in.c + ci)) * in.f[p * in.c + ci];
        o.f[p * oc + co] = q8(acc, shift, relu);
      end
    end
    return o;
  endfunction

  // MBConv with the same shift defaults as mbconv_block (7, 6, 7)
  function automatic fmap mbconv(fmap in, int ce, int co, int stride, int seed);
    fmap e, d, p;
    e = (ce != in.c) ? conv1x1(in, ce, seed, 7, 1) : in;
    d = conv_kxk(e, ce, 3, stride, 1, seed + 1, 6, 1);
    p = conv1x1(d, co, seed + 2, 7, 0);
    if (stride == 1 && in.c == co) begin
      foreach (p.f[i]) if (p.nz[i / co]) p.f[i] = sat8(p.f[i] + in.f[i]);
    end
    return p;
  endfunction

  // global average pooling (as sum times count) + FC + argmax
  function automatic void pool_fc(fmap in, int ncls, int seed, output int cls, output longint logit);
    longint sums[] = new[in.c];
    longint lg;
    int cnt = 0;
    foreach (sums[i]) sums[i] = 0;
    for (int p = 0; p < in.h * in.w; p++) begin
      if (!in.nz[p]) continue;
      cnt++;
      for (int ch = 0; ch < in.c; ch++) sums[ch] += in.f[p * in.c + ch];
    end
    cls = 0;
    logit = 0;
    for (int n = 0; n < ncls; n++) begin
      lg = longint'(bgen(seed, n)) * cnt;
      for (int ch = 0; ch < in.c; ch++) lg += longint'(wgen(seed, n * in.c + ch)) * sums[ch];
      if (n == 0 || lg > logit) begin
        cls = n;
        logit = lg;
      end
    end
  endfunction

  // random sparse input: each pixel non-zero with probability pct/100,
  // channel values 0..maxv with at least one non-zero channel
  function automatic fmap random_input(int h, int w, int c, int pct, int maxv);
    fmap m = new(h, w, c);
    for (int p = 0; p < h * w; p++) begin
      if (($urandom % 100) < pct) begin
        m.nz[p] = 1;
        for (int ch = 0; ch < c; ch++) m.f[p * c + ch] = $urandom % (maxv + 1);
        m.f[p * c + ($urandom % c)] = 1 + $urandom % maxv;
      end
    end
    return m;
  endfunction
endpackage
