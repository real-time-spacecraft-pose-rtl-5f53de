// tb_ref_pkg -- reference arithmetic for the testbenches.
//
// Plain loop-nest models of the network layers, written without any of
// the folding, buffering or handshakes of the RTL, plus the generators
// of the weights and thresholds that testbenches load into the design.
// Feature maps are int arrays indexed [(y*H + x)*C + c].
//  wgen(unit,row,col,wb)   pseudo-random signed weight of wb bits
//  tgen(unit,ch,t,step,sg) threshold t (0..14) of a channel, ascending;
//                          centred on zero when sg (signed output),
//                          positive (ReLU-like) otherwise
//  conv / dwconv           accumulators of a KxK / depthwise convolution
//                          with stride S and one pixel of zero padding
//  act                     multi-threshold activation of a map
package tb_ref_pkg;

  function automatic int unsigned mix(int unsigned a, int unsigned b, int unsigned c);
    int unsigned h;
    h = a * 32'h9E3779B1 ^ (b + 32'h7F4A7C15) * 32'h85EBCA77 ^ (c + 32'h165667B1) * 32'hC2B2AE3D;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    h = h * 32'h297A2D39;
    h = h ^ (h >> 15);
    return h;
  endfunction

  function automatic int wgen(int unit, int row, int col, int wb);
    int unsigned r = mix(unit, row, col);
    int span = 1 << wb;
    return int'(r % span) - span / 2;
  endfunction

  function automatic int isqrt(int v);
    int r = 0;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  // threshold spacing for a dot product of mw terms of scale `mag`
  function automatic int thr_step(int mw, int mag);
    return 1 + (isqrt(mw) * mag) / 4;
  endfunction

  function automatic int tgen(int unit, int ch, int t, int step, bit sg);
    int off = int'(mix(unit + 1000, ch, 7) % (step + 1)) - step / 2;
    return sg ? off + (t - 7) * step : off + t * step;
  endfunction

  function automatic int thr_apply(int v, int unit, int ch, int step, bit sg);
    int cnt = 0;
    for (int t = 0; t < 15; t++) if (v >= tgen(unit, ch, t, step, sg)) cnt++;
    return sg ? cnt - 8 : cnt;
  endfunction

  function automatic int out_dim(int h, int k, int s, int p);
    return (h + 2 * p - k) / s + 1;
  endfunction

  // KxK convolution (K = 1 or 3), weights wgen(unit, o, (ky*K+kx)*C+c, wb)
  function automatic void conv(input int in[], input int h, input int c,
                               input int k, input int s, input int co,
                               input int unit, input int wb, output int out[]);
    int p = (k - 1) / 2;
    int ho = out_dim(h, k, s, p);
    out = new[ho * ho * co];
    for (int oy = 0; oy < ho; oy++)
      for (int ox = 0; ox < ho; ox++)
        for (int o = 0; o < co; o++) begin
          int acc = 0;
          for (int ky = 0; ky < k; ky++)
            for (int kx = 0; kx < k; kx++) begin
              int y = oy * s - p + ky;
              int x = ox * s - p + kx;
              if (y >= 0 && y < h && x >= 0 && x < h)
                for (int i = 0; i < c; i++)
                  acc += in[(y * h + x) * c + i] * wgen(unit, o, (ky * k + kx) * c + i, wb);
            end
          out[(oy * ho + ox) * co + o] = acc;
        end
  endfunction

  // 3x3 depthwise convolution, weights wgen(unit, channel, tap, wb)
  function automatic void dwconv(input int in[], input int h, input int c,
                                 input int s, input int unit, input int wb,
                                 output int out[]);
    int ho = out_dim(h, 3, s, 1);
    out = new[ho * ho * c];
    for (int oy = 0; oy < ho; oy++)
      for (int ox = 0; ox < ho; ox++)
        for (int i = 0; i < c; i++) begin
          int acc = 0;
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++) begin
              int y = oy * s - 1 + ky;
              int x = ox * s - 1 + kx;
              if (y >= 0 && y < h && x >= 0 && x < h)
                acc += in[(y * h + x) * c + i] * wgen(unit, i, ky * 3 + kx, wb);
            end
          out[(oy * ho + ox) * c + i] = acc;
        end
  endfunction

  function automatic void act(input int in[], input int c, input int unit,
                              input int step, input bit sg, output int out[]);
    out = new[in.size()];
    for (int i = 0; i < in.size(); i++) out[i] = thr_apply(in[i], unit, i % c, step, sg);
  endfunction

  function automatic void add(input int a[], input int b[], output int out[]);
    out = new[a.size()];
    for (int i = 0; i < a.size(); i++) out[i] = a[i] + b[i];
  endfunction

endpackage
