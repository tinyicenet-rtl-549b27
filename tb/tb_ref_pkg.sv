// tb_ref_pkg -- reference models of the TinyIceNet layers for the
// testbenches.  Feature maps are flat int arrays in HWC order:
// index = (y*W + x)*C + c.  These are straightforward loop nests written
// from the layer definitions (zero-padded 3x3 convolution, folded BN +
// ReLU, 2x2 max pooling, x8 nearest upsampling, 1x1 convolution, argmax);
// they share only the weight formulas with the RTL.
package tb_ref_pkg;
  import tinyicenet_pkg::*;

  typedef int fmap_t[];

  function automatic fmap_t conv3_ref(fmap_t in, int H, int W, int CIN, int COUT, int LAYER);
    fmap_t out = new[H * W * COUT];
    int wt[] = new[COUT * CIN * 9];
    // weights tabulated once: the formula is costly at full image size
    for (int co = 0; co < COUT; co++)
      for (int ci = 0; ci < CIN; ci++)
        for (int k = 0; k < 9; k++) wt[(co * CIN + ci) * 9 + k] = int'(conv_weight(LAYER, co, ci, k / 3, k % 3));
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        for (int co = 0; co < COUT; co++) begin
          longint acc = 0;
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++) begin
              int yy = y + ky - 1, xx = x + kx - 1;
              if (yy >= 0 && yy < H && xx >= 0 && xx < W)
                for (int ci = 0; ci < CIN; ci++)
                  acc += longint'(in[(yy * W + xx) * CIN + ci] * wt[(co * CIN + ci) * 9 + ky * 3 + kx]);
            end
          begin
            longint t;
            t = acc * longint'(bn_scale(LAYER, co)) + longint'(int'(bn_bias(LAYER, co, CIN)));
            t = t >>> bn_shift(CIN);
            if (t < 0) t = 0;
            if (t > 127) t = 127;
            out[(y * W + x) * COUT + co] = int'(t);
          end
        end
    return out;
  endfunction

  function automatic fmap_t pool_ref(fmap_t in, int H, int W, int C);
    fmap_t out = new[(H / 2) * (W / 2) * C];
    for (int y = 0; y < H / 2; y++)
      for (int x = 0; x < W / 2; x++)
        for (int c = 0; c < C; c++) begin
          int m = -1000;
          for (int dy = 0; dy < 2; dy++)
            for (int dx = 0; dx < 2; dx++) begin
              int v = in[((2 * y + dy) * W + 2 * x + dx) * C + c];
              if (v > m) m = v;
            end
          out[(y * (W / 2) + x) * C + c] = m;
        end
    return out;
  endfunction

  function automatic fmap_t up_ref(fmap_t in, int H, int W, int C, int F);
    fmap_t out = new[H * F * W * F * C];
    for (int y = 0; y < H * F; y++)
      for (int x = 0; x < W * F; x++)
        for (int c = 0; c < C; c++)
          out[(y * W * F + x) * C + c] = in[((y / F) * W + x / F) * C + c];
    return out;
  endfunction

  // logits of the pointwise classifier, HWC with COUT classes
  function automatic fmap_t pw_ref(fmap_t in, int NPIX, int CIN, int COUT, int LAYER);
    fmap_t out = new[NPIX * COUT];
    for (int p = 0; p < NPIX; p++)
      for (int co = 0; co < COUT; co++) begin
        int s = int'(pw_bias(co));
        for (int ci = 0; ci < CIN; ci++)
          s += in[p * CIN + ci] * int'(conv_weight(LAYER, co, ci, 0, 0));
        out[p * COUT + co] = s;
      end
    return out;
  endfunction

  function automatic fmap_t argmax_ref(fmap_t in, int NPIX, int N);
    fmap_t out = new[NPIX];
    for (int p = 0; p < NPIX; p++) begin
      int b = 0;
      for (int k = 1; k < N; k++) if (in[p * N + k] > in[p * N + b]) b = k;
      out[p] = b;
    end
    return out;
  endfunction

  // whole network: 2-channel H x W int8 scene -> H x W classes
  function automatic fmap_t net_ref(fmap_t x, int H, int W);
    fmap_t a;
    a = conv3_ref(x, H, W, 2, 16, 1);
    a = conv3_ref(a, H, W, 16, 16, 2);
    a = pool_ref(a, H, W, 16);
    a = conv3_ref(a, H / 2, W / 2, 16, 32, 3);
    a = conv3_ref(a, H / 2, W / 2, 32, 32, 4);
    a = pool_ref(a, H / 2, W / 2, 32);
    a = conv3_ref(a, H / 4, W / 4, 32, 64, 5);
    a = conv3_ref(a, H / 4, W / 4, 64, 64, 6);
    a = pool_ref(a, H / 4, W / 4, 64);
    a = conv3_ref(a, H / 8, W / 8, 64, 64, 7);
    a = conv3_ref(a, H / 8, W / 8, 64, 64, 8);
    a = up_ref(a, H / 8, W / 8, 64, 8);
    a = pw_ref(a, H * W, 64, NCLS, 9);
    return argmax_ref(a, H * W, NCLS);
  endfunction
endpackage
