// see_ref_pkg: reference model of the sparse backbone for the testbenches.
//
// Works on whole frames held in flat integer arrays: a feature map of size
// H x W x C is indexed (y*W + x)*C + c, and a mask of H x W bits marks the
// non-zero pixels. Outputs are computed only where the mask is set
// (submanifold convolution); neighbours outside the mask count as zero.
// Everything is plain integer arithmetic written independently of the RTL.
package see_ref_pkg;

  function automatic int rq(longint acc, int scale, int shift, bit relu);
    longint p = acc * scale;
    if (shift > 0) p = p + (longint'(1) <<< (shift - 1));
    p = p >>> shift;
    if (relu && p < 0) return 0;
    if (p > 127) return 127;
    if (p < -128) return -128;
    return int'(p);
  endfunction

  // pointwise: w[o*CIN + i]
  function automatic void conv1x1(input int H, W, CIN, COUT, input bit nz[],
                                  input int fin[], input int w[], input int scale, shift,
                                  input bit relu, output int fout[]);
    fout = new[H * W * COUT];
    foreach (fout[k]) fout[k] = 0;
    for (int p = 0; p < H * W; p++) begin
      if (!nz[p]) continue;
      for (int o = 0; o < COUT; o++) begin
        longint acc = 0;
        for (int i = 0; i < CIN; i++) acc += longint'(w[o * CIN + i]) * fin[p * CIN + i];
        fout[p * COUT + o] = rq(acc, scale, shift, relu);
      end
    end
  endfunction

  // depthwise 3x3: w[c*9 + k], k row-major (k = (dy+1)*3 + (dx+1))
  function automatic void dw3x3(input int H, W, C, input bit nz[],
                                input int fin[], input int w[], input int scale, shift,
                                input bit relu, output int fout[]);
    fout = new[H * W * C];
    foreach (fout[k]) fout[k] = 0;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        if (!nz[y * W + x]) continue;
        for (int c = 0; c < C; c++) begin
          longint acc = 0;
          for (int k = 0; k < 9; k++) begin
            int ny = y + k / 3 - 1;
            int nx = x + k % 3 - 1;
            if (ny < 0 || ny >= H || nx < 0 || nx >= W) continue;
            if (!nz[ny * W + nx]) continue;
            acc += longint'(w[c * 9 + k]) * fin[(ny * W + nx) * C + c];
          end
          fout[(y * W + x) * C + c] = rq(acc, scale, shift, relu);
        end
      end
  endfunction

  // full 3x3: w[(k*COUT + o)*CIN + i]
  function automatic void conv3x3(input int H, W, CIN, COUT, input bit nz[],
                                  input int fin[], input int w[], input int scale, shift,
                                  input bit relu, output int fout[]);
    fout = new[H * W * COUT];
    foreach (fout[k]) fout[k] = 0;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        if (!nz[y * W + x]) continue;
        for (int o = 0; o < COUT; o++) begin
          longint acc = 0;
          for (int k = 0; k < 9; k++) begin
            int ny = y + k / 3 - 1;
            int nx = x + k % 3 - 1;
            if (ny < 0 || ny >= H || nx < 0 || nx >= W) continue;
            if (!nz[ny * W + nx]) continue;
            for (int i = 0; i < CIN; i++)
              acc += longint'(w[(k * COUT + o) * CIN + i]) * fin[(ny * W + nx) * CIN + i];
          end
          fout[(y * W + x) * COUT + o] = rq(acc, scale, shift, relu);
        end
      end
  endfunction

  function automatic int sat8(int v);
    return (v > 127) ? 127 : (v < -128) ? -128 : v;
  endfunction

  // one inverted-bottleneck block; weights for the three layers, scales/shifts in sc[3], sh[3]
  function automatic void block(input int H, W, CIN, COUT, EXP, input bit res, input bit nz[],
                                input int fin[], input int we[], input int wd[], input int wp[],
                                input int sc[3], input int sh[3], output int fout[]);
    int e[], d[];
    conv1x1(H, W, CIN, CIN * EXP, nz, fin, we, sc[0], sh[0], 1'b1, e);
    dw3x3(H, W, CIN * EXP, nz, e, wd, sc[1], sh[1], 1'b1, d);
    conv1x1(H, W, CIN * EXP, COUT, nz, d, wp, sc[2], sh[2], 1'b0, fout);
    if (res) foreach (fout[k]) fout[k] = sat8(fout[k] + fin[k]);
  endfunction

  // number of non-zero 3x3 neighbours (centre included) of pixel (y, x)
  function automatic int neighbours(input int H, W, input bit nz[], input int y, x);
    int n = 0;
    for (int k = 0; k < 9; k++) begin
      int ny = y + k / 3 - 1;
      int nx = x + k % 3 - 1;
      if (ny >= 0 && ny < H && nx >= 0 && nx < W && nz[ny * W + nx]) n++;
    end
    return n;
  endfunction

endpackage
