// tb_ref_pkg: behavioural reference model of the channel-estimation network,
// used by the testbenches to work out expected outputs independently of the
// RTL. Everything is plain integer arithmetic on dynamic arrays, layer by
// layer, with whole feature maps in memory (no streaming, no tiling), so it
// shares no structure with the hardware.
//
// Feature maps are flat arrays indexed (y*W + x)*C + c (depth-first order).
// Conv weights are indexed (fo*FIN + fi)*K*K + rr*K + cc.
package tb_ref_pkg;

  localparam longint ONE = 64'sd33554432;   // 1.0 in FIX32 (2^25)

  function automatic int sat32(longint v);
    if (v > 64'sd2147483647)  return 32'sh7FFFFFFF;
    if (v < -64'sd2147483648) return 32'sh80000000;
    return int'(v);
  endfunction

  // round(v*m / 2^sh) + zp, clamped to 0..255.
  function automatic int rq(longint v, longint m, int sh, int zp);
    longint p, q;
    p = v * m;
    if (sh > 0) q = (p + (64'sd1 <<< (sh - 1))) >>> sh;
    else        q = p;
    q = q + zp;
    if (q < 0)   return 0;
    if (q > 255) return 255;
    return int'(q);
  endfunction

  function automatic int dq(int x, int zp, int scale);
    return sat32(longint'(x - zp) * longint'(scale));
  endfunction

  function automatic int fmul(int a, int b);
    return sat32((longint'(a) * longint'(b)) >>> 25);
  endfunction

  // Random parameters of one quantised conv layer.
  class conv_layer;
    int fin, fout, kk;
    int w[], bias[], mult[], shift[];
    int zpi, zpo;
    function new(int fin_, int fout_, int kk_);
      fin = fin_; fout = fout_; kk = kk_;
      w = new[fout*fin*kk];
      bias = new[fout]; mult = new[fout]; shift = new[fout];
      foreach (w[i]) w[i] = int'($urandom_range(40)) - 20;
      foreach (bias[i]) begin
        bias[i]  = int'($urandom_range(4000)) - 2000;
        shift[i] = 16;
        // spread of a sum is about 850*sqrt(fin*kk); map it to about +-60
        mult[i]  = int'((60.0 * 65536.0) / (850.0 * $sqrt(real'(fin*kk)))) +
                   int'($urandom_range(100));
      end
      zpi = 100 + int'($urandom_range(40));
      zpo = 100 + int'($urandom_range(40));
    endfunction
  endclass

  // 3x3 convolution, stride 1, zero padding (in the real domain) of 1.
  function automatic void conv3(int h, int wd, conv_layer l, input int in[], output int out[]);
    out = new[h*wd*l.fout];
    for (int y = 0; y < h; y++)
      for (int x = 0; x < wd; x++)
        for (int fo = 0; fo < l.fout; fo++) begin
          longint acc;
          acc = l.bias[fo];
          for (int fi = 0; fi < l.fin; fi++)
            for (int rr = 0; rr < 3; rr++)
              for (int cc = 0; cc < 3; cc++) begin
                int yy, xx;
                yy = y + rr - 1; xx = x + cc - 1;
                if (yy >= 0 && yy < h && xx >= 0 && xx < wd)
                  acc += longint'(in[(yy*wd + xx)*l.fin + fi] - l.zpi) *
                         longint'(l.w[(fo*l.fin + fi)*9 + rr*3 + cc]);
              end
          out[(y*wd + x)*l.fout + fo] = rq(longint'(sat32(acc)), l.mult[fo], l.shift[fo], l.zpo);
        end
  endfunction

  // 1x1 convolution.
  function automatic void conv1(int npix, conv_layer l, input int in[], output int out[]);
    out = new[npix*l.fout];
    for (int p = 0; p < npix; p++)
      for (int fo = 0; fo < l.fout; fo++) begin
        longint acc;
        acc = l.bias[fo];
        for (int fi = 0; fi < l.fin; fi++)
          acc += longint'(in[p*l.fin + fi] - l.zpi) * longint'(l.w[fo*l.fin + fi]);
        out[p*l.fout + fo] = rq(longint'(sat32(acc)), l.mult[fo], l.shift[fo], l.zpo);
      end
  endfunction

  function automatic void relu(int zp, input int in[], output int out[]);
    out = new[in.size()];
    foreach (in[i]) out[i] = (in[i] > zp) ? in[i] : zp;
  endfunction

  // Depth-to-space: in H x W x (cout*r*r) -> (r*H) x (r*W) x cout.
  function automatic void shuffle(int h, int wd, int r, int cout, input int in[], output int out[]);
    out = new[h*wd*r*r*cout];
    for (int yy = 0; yy < h*r; yy++)
      for (int xx = 0; xx < wd*r; xx++)
        for (int co = 0; co < cout; co++)
          out[(yy*wd*r + xx)*cout + co] =
            in[((yy/r)*wd + xx/r)*cout*r*r + co*r*r + (yy%r)*r + (xx%r)];
  endfunction

  // sigma_a(x) = sigmoid(x) - 0.5 sampled at 512 interval mid-points of (-3, 3).
  function automatic void make_lut(output int lut[]);
    lut = new[512];
    foreach (lut[i]) begin
      real xc;
      xc = -3.0 + (real'(i) + 0.5) * 6.0 / 512.0;
      lut[i] = int'($rtoi((1.0 / (1.0 + $exp(-xc)) - 0.5) * 33554432.0 + 0.5));
    end
  endfunction

  // Attention parameters of one SPAB.
  class att_param;
    int scale_h, zp_h, scale_x, zp_x, mult, shift, zp;
    function new();
      scale_h = 200000 + int'($urandom_range(200000));   // about 0.006..0.012
      scale_x = 200000 + int'($urandom_range(200000));
      zp_h    = 100 + int'($urandom_range(50));
      zp_x    = 100 + int'($urandom_range(50));
      shift   = 40;
      mult    = 2100000 + int'($urandom_range(400000));
      zp      = 110 + int'($urandom_range(30));
    endfunction
  endclass

  function automatic void attention(att_param a, input int lut[], input int h[], input int x[],
                                    output int out[]);
    out = new[h.size()];
    foreach (h[i]) begin
      int hf, xf, idx, s;
      longint t;
      hf = dq(h[i], a.zp_h, a.scale_h);
      xf = dq(x[i], a.zp_x, a.scale_x);
      t  = longint'(hf) + 3*ONE;
      if (t < 0)             idx = 0;
      else if (t >= 6*ONE)   idx = 511;
      else                   idx = int'(t / 393216);
      s  = sat32(longint'(hf) + longint'(xf));
      out[i] = rq(longint'(fmul(lut[idx], s)), a.mult, a.shift, a.zp);
    end
  endfunction

endpackage
