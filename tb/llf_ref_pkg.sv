// llf_ref_pkg: behavioural reference model of the local Laplacian filter
// datapath, used by the testbenches to compute expected values.
//
// It works on whole sub-images held as integer arrays rather than on column
// streams, and is written from the algorithm (remap, valid 3x3 filter with
// the shift-based modified Gaussian kernel, keep-even downsampling, zero
// insertion with gain 4), not from the RTL. Image index order is
// [row][column]; a row is a lane, a column is a stream beat.
package llf_ref_pkg;

  localparam int MAXD = 32;
  typedef int img_t [MAXD][MAXD];

  typedef struct {
    img_t a;
    int   h;
    int   w;
  } sub_t;

  // Remap tables from the usual local-Laplacian curves on a 0..255 scale:
  // f_d(x) = x^alpha (detail), f_e(a) = beta*a (edge).
  function automatic void make_tables(real alpha, real beta, real sigma_n,
                                      output int td[256], output int te[256],
                                      output int sigma);
    real s;
    s = sigma_n * 255.0;
    sigma = int'(s);
    for (int d = 0; d < 256; d++) begin
      real v;
      v = (s > 0.0) ? s * ((d / s) ** alpha) : 0.0;
      td[d] = (v > 255.0) ? 255 : int'(v);
      v = beta * (d - s) + s;
      te[d] = (v > 255.0) ? 255 : (v < 0.0 ? 0 : int'(v));
    end
  endfunction

  function automatic int remap_px(int i, int g, int sigma, int td[256],
                                  int te[256]);
    int d, t, r;
    d = (i > g) ? i - g : g - i;
    if (d == 0) return g;
    t = (d <= sigma) ? td[d] : te[d];
    r = (i > g) ? g + t : g - t;
    if (r > 255) r = 255;
    if (r < 0)   r = 0;
    return r;
  endfunction

  function automatic bit is_edge(int i, int g, int sigma);
    int d;
    d = (i > g) ? i - g : g - i;
    return d > sigma;
  endfunction

  function automatic int sau_f(int a, int b, int c, int sh);
    return (a >> sh) + (b >> (sh - 1)) + (c >> sh);
  endfunction

  // Valid 3x3 convolution with the modified Gaussian kernel:
  // out[y][x] = S(x) + 2*S(x+1) + S(x+2), S = vertical shift-and-add.
  function automatic sub_t conv(sub_t s, int sh);
    sub_t o;
    o.h = s.h - 2;
    o.w = s.w - 2;
    for (int y = 0; y < o.h; y++)
      for (int x = 0; x < o.w; x++)
        o.a[y][x] = sau_f(s.a[y][x],   s.a[y+1][x],   s.a[y+2][x],   sh)
                  + 2 * sau_f(s.a[y][x+1], s.a[y+1][x+1], s.a[y+2][x+1], sh)
                  + sau_f(s.a[y][x+2], s.a[y+1][x+2], s.a[y+2][x+2], sh);
    return o;
  endfunction

  function automatic sub_t down(sub_t s);
    sub_t o;
    o.h = (s.h + 1) / 2;
    o.w = (s.w + 1) / 2;
    for (int y = 0; y < o.h; y++)
      for (int x = 0; x < o.w; x++)
        o.a[y][x] = s.a[2*y][2*x];
    return o;
  endfunction

  function automatic sub_t up(sub_t s, int gain_shift);
    sub_t o;
    o.h = 2 * s.h;
    o.w = 2 * s.w;
    for (int y = 0; y < o.h; y++)
      for (int x = 0; x < o.w; x++)
        o.a[y][x] = (y % 2 == 0 && x % 2 == 0) ? (s.a[y/2][x/2] << gain_shift) : 0;
    return o;
  endfunction

  // Output Laplacian coefficient of one sub-image for a unit that does
  // `depth` filter/downsample rounds, taken at full-resolution index c0
  // mapped to level depth-1, plus the row/column phase (0 or 1).
  function automatic int lpu_coef(img_t img, int h, int w, int g, int sigma,
                                  int td[256], int te[256],
                                  int depth, int c0, int sh, int gain_shift,
                                  int ph_r, int ph_c);
    sub_t cur, prev, f;
    int p;
    cur.h = h;
    cur.w = w;
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++)
        cur.a[y][x] = remap_px(img[y][x], g, sigma, td, te);
    p = c0;
    prev = cur;
    for (int k = 0; k < depth; k++) begin
      prev = cur;
      cur  = down(conv(cur, sh));
      if (k > 0) p = (p - 1) / 2;
    end
    f = conv(up(cur, gain_shift), sh);
    return prev.a[p+ph_r][p+ph_c] - f.a[p+ph_r-2][p+ph_c-2];
  endfunction

endpackage
