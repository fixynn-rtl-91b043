// fixynn_ref_pkg -- reference model of the fixed layers, for testbenches.
//
// Computes a layer the plain way: TensorFlow 'SAME' zero padding, ordinary
// multiplications with the weight table of fixynn_pkg, then BN, ReLU and a
// rounding, saturating quantisation, all in 64-bit integers. Feature maps are
// flat int arrays indexed (y*W + x)*C + c.
package fixynn_ref_pkg;
  import fixynn_pkg::*;

  class bn_cfg;
    int scale[];
    int bias[];
    int shift;
    function new(int c);
      scale = new[c];
      bias  = new[c];
      foreach (scale[i]) begin scale[i] = 1; bias[i] = 0; end
      shift = 0;
    endfunction
  endclass

  function automatic int bnq(longint acc, bn_cfg b, int ch);
    longint y = acc * longint'(b.scale[ch]) + longint'(b.bias[ch]);
    if (y < 0) y = 0;
    if (b.shift > 0) y = (y + (longint'(1) << (b.shift - 1))) >>> b.shift;
    if (y > 255) y = 255;
    return int'(y);
  endfunction

  function automatic int pad_before(int size, int s);
    int o = out_size(size, s);
    int tot = (o - 1) * s + KSIZE - size;
    if (tot < 0) tot = 0;
    return tot / 2;
  endfunction

  // window value or zero padding
  function automatic int px(const ref int img[], input int w, int h, int c, int y, int x, int ch);
    if (y < 0 || y >= h || x < 0 || x >= w) return 0;
    return img[(y * w + x) * c + ch];
  endfunction

  // one fixed layer; b0 for the conv / depth-wise stage, b1 for point-wise
  function automatic void ref_layer(int l, int w, int h, const ref int img[],
                                    input bn_cfg b0, input bn_cfg b1, ref int res[]);
    int s   = layer_stride(l);
    int ci  = layer_cin(l);
    int co  = layer_cout(l);
    int wo  = out_size(w, s);
    int ho  = out_size(h, s);
    int py  = pad_before(h, s);
    int pxb = pad_before(w, s);
    int dw[];
    res = new[wo * ho * co];
    dw  = new[ci];
    for (int oy = 0; oy < ho; oy++)
      for (int ox = 0; ox < wo; ox++) begin
        int y0 = oy * s - py;
        int x0 = ox * s - pxb;
        if (layer_is_dws(l) == 0) begin
          for (int o = 0; o < co; o++) begin
            longint acc = 0;
            for (int c = 0; c < ci; c++)
              for (int ky = 0; ky < KSIZE; ky++)
                for (int kx = 0; kx < KSIZE; kx++)
                  acc += longint'(fixed_weight(l, 0, o, c * KK + ky * KSIZE + kx)) *
                         px(img, w, h, ci, y0 + ky, x0 + kx, c);
            res[(oy * wo + ox) * co + o] = bnq(acc, b0, o);
          end
        end else begin
          for (int c = 0; c < ci; c++) begin
            longint acc = 0;
            for (int ky = 0; ky < KSIZE; ky++)
              for (int kx = 0; kx < KSIZE; kx++)
                acc += longint'(fixed_weight(l, 1, c, ky * KSIZE + kx)) *
                       px(img, w, h, ci, y0 + ky, x0 + kx, c);
            dw[c] = bnq(acc, b0, c);
          end
          for (int o = 0; o < co; o++) begin
            longint acc = 0;
            for (int c = 0; c < ci; c++)
              acc += longint'(fixed_weight(l, 2, o, c)) * dw[c];
            res[(oy * wo + ox) * co + o] = bnq(acc, b1, o);
          end
        end
      end
  endfunction
  // 3x3 max pooling with zero padding, stride s, c channels
  function automatic void ref_pool(int w, int h, int c, int s, const ref int img[],
                                   ref int res[]);
    int wo = out_size(w, s);
    int ho = out_size(h, s);
    int py = pad_before(h, s);
    int pxb = pad_before(w, s);
    res = new[wo * ho * c];
    for (int oy = 0; oy < ho; oy++)
      for (int ox = 0; ox < wo; ox++)
        for (int ch = 0; ch < c; ch++) begin
          int m = 0;
          for (int ky = 0; ky < KSIZE; ky++)
            for (int kx = 0; kx < KSIZE; kx++) begin
              int v = px(img, w, h, c, oy * s - py + ky, ox * s - pxb + kx, ch);
              if (v > m) m = v;
            end
          res[(oy * wo + ox) * c + ch] = m;
        end
  endfunction
endpackage
