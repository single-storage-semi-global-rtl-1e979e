// sgm_ref_pkg: software reference of the census / MGM stereo matcher and
// of the bilinear remap, used by the testbenches to work out expected
// results independently of the RTL. Images are flat byte arrays in raster
// order.
package sgm_ref_pkg;

  typedef byte unsigned img_t[];

  // census vector of (y, x): raster order over the window, MSB first, bit
  // set when the neighbour is inside the image columns and darker.
  function automatic logic [63:0] census(const ref img_t img, input int w, input int win,
                                         input int y, input int x);
    logic [63:0] v = '0;
    int hw = win / 2;
    byte unsigned c = img[y*w + x];
    for (int r = -hw; r <= hw; r++)
      for (int q = -hw; q <= hw; q++) begin
        if (r == 0 && q == 0) continue;
        v = v << 1;
        if (x + q >= 0 && x + q < w && img[(y+r)*w + x + q] < c) v[0] = 1'b1;
      end
    return v;
  endfunction

  function automatic int popcount(logic [63:0] v);
    int n = 0;
    for (int i = 0; i < 64; i++) n += v[i];
    return n;
  endfunction

  function automatic int term(const ref int v[], input int vmin, input int d, input int dr,
                              input int p1, input int p2);
    int best = vmin + p2;
    if (v[d] < best) best = v[d];
    if (d > 0 && v[d-1] + p1 < best) best = v[d-1] + p1;
    if (d < dr - 1 && v[d+1] + p1 < best) best = v[d+1] + p1;
    return best - vmin;
  endfunction

  // Disparities of centre rows [cy0, cy1) of one band; aggregation starts
  // fresh at cy0. disp is indexed (cy*w + cx).
  function automatic void sgm_band(const ref img_t l, const ref img_t r, input int w,
                                   input int win, input int dr, input int p1, input int p2,
                                   input int cy0, input int cy1,
                                   ref int disp[]);
    int prev[][];   // [w][dr] row above
    int pmin[];
    int cur[][];
    int cmin[];
    int maxv[];
    int nb[4][];
    int nbm[4];
    int nbits = win * win - 1;
    logic [63:0] rcen[];
    prev = new[w]; cur = new[w]; pmin = new[w]; cmin = new[w]; rcen = new[w];
    maxv = new[dr];
    foreach (maxv[i]) maxv[i] = 255;
    for (int x = 0; x < w; x++) begin
      prev[x] = new[dr]; cur[x] = new[dr];
      foreach (prev[x][i]) prev[x][i] = 255;
      pmin[x] = 255;
    end
    for (int y = cy0; y < cy1; y++) begin
      for (int x = 0; x < w; x++) rcen[x] = census(r, w, win, y, x);
      for (int x = 0; x < w; x++) begin
        logic [63:0] lc = census(l, w, win, y, x);
        int bestv = 1 << 30, bestd = 0, m = 1 << 30;
        nb[0] = (x > 0) ? prev[x-1] : maxv;      nbm[0] = (x > 0) ? pmin[x-1] : 255;
        nb[1] = prev[x];                         nbm[1] = pmin[x];
        nb[2] = (x < w - 1) ? prev[x+1] : maxv;  nbm[2] = (x < w - 1) ? pmin[x+1] : 255;
        nb[3] = (x > 0) ? cur[x-1] : maxv;       nbm[3] = (x > 0) ? cmin[x-1] : 255;
        for (int d = 0; d < dr; d++) begin
          int c = (x - d >= 0) ? popcount(lc ^ rcen[x-d]) : nbits;
          int s = 0;
          int a;
          for (int k = 0; k < 4; k++) s += term(nb[k], nbm[k], d, dr, p1, p2);
          a = c + (s >> 2);
          if (a > 255) a = 255;
          cur[x][d] = a;
          if (a < bestv) begin bestv = a; bestd = d; end
        end
        cmin[x] = bestv;
        disp[y*w + x] = bestd;
      end
      for (int x = 0; x < w; x++) begin
        prev[x] = new[dr](cur[x]);
        pmin[x] = cmin[x];
      end
    end
  endfunction

  // bilinear remap of one pixel, 5-bit fractions, clamped at the last
  // column and row
  function automatic int remap_px(const ref img_t raw, input int w, input int h,
                                  input int mx, input int my);
    int x0 = mx >> 5, y0 = my >> 5, fx = mx & 31, fy = my & 31;
    int x1, y1, a, b, c, d, top, bot;
    x1 = (x0 >= w - 1) ? w - 1 : x0 + 1;
    y1 = (y0 >= h - 1) ? h - 1 : y0 + 1;
    if (x0 > w - 1) x0 = w - 1;
    if (y0 > h - 1) y0 = h - 1;
    a = raw[y0*w + x0]; b = raw[y0*w + x1]; c = raw[y1*w + x0]; d = raw[y1*w + x1];
    top = a * (32 - fx) + b * fx;
    bot = c * (32 - fx) + d * fx;
    return (top * (32 - fy) + bot * fy + 512) >> 10;
  endfunction

endpackage
