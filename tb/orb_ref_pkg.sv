// orb_ref_pkg: behavioural reference model of the ORB pipeline used by the
// testbenches to compute expected results directly from an image, without
// the streaming structure of the RTL: image scaling, FAST score and corner
// test, non-maximum suppression, 7x7 binomial smoothing, 37x37 moments,
// sector quantisation (tan, cos, sin computed here in floating point and
// rounded to Q.8) and rotated BRIEF descriptors. Images are flat arrays in
// raster order.
package orb_ref_pkg;
  import orb_pkg::*;

  typedef int img_t[];

  typedef struct {
    int x, y, score;
  } rkp_t;

  typedef struct {
    int          x, y, score;
    int          quad, sector;
    logic [255:0] desc;
  } rdesc_t;

  localparam real PI = 3.14159265358979;


  function automatic img_t scale(img_t im, int w, int h, output int w2, output int h2);
    img_t o;
    int n;
    w2 = 0; h2 = 0;
    for (int y = 0; y < h - 1; y++) if (y % 6 != 5) h2++;
    for (int x = 0; x < w - 1; x++) if (x % 6 != 5) w2++;
    o = new[w2 * h2];
    n = 0;
    for (int y = 0; y < h - 1; y++) begin
      if (y % 6 == 5) continue;
      for (int x = 0; x < w - 1; x++) begin
        int a, b, v;
        if (x % 6 == 5) continue;
        a = x % 6; b = y % 6;
        v = (5 - a) * (5 - b) * im[(y) * w + (x)] + a * (5 - b) * im[(y) * w + (x + 1)]
          + (5 - a) * b * im[(y + 1) * w + (x)] + a * b * im[(y + 1) * w + (x + 1)];
        o[n++] = (v + 12) / 25;
      end
    end
    return o;
  endfunction

  function automatic int fast_score(img_t im, int w, int x, int y, int th);
    int dx[16] = '{0, 1, 2, 3, 3, 3, 2, 1, 0, -1, -2, -3, -3, -3, -2, -1};
    int dy[16] = '{-3, -3, -2, -1, 0, 1, 2, 3, 3, 3, 2, 1, 0, -1, -2, -3};
    int p, sad, v;
    bit b[16], d[16];
    bit corner;
    p = im[(y) * w + (x)];
    sad = 0;
    for (int i = 0; i < 16; i++) begin
      v = im[(y + dy[i]) * w + (x + dx[i])];
      b[i] = v > p + th;
      d[i] = v < p - th;
      sad += (v > p) ? v - p : p - v;
    end
    corner = 0;
    for (int s = 0; s < 16; s++) begin
      bit ab, ad;
      ab = 1; ad = 1;
      for (int k = 0; k < 9; k++) begin
        ab &= b[(s + k) % 16];
        ad &= d[(s + k) % 16];
      end
      corner |= ab | ad;
    end
    return corner ? sad : 0;
  endfunction

  // Keypoints after NMS, raster order, at least edg pixels from a border.
  function automatic void keypoints(img_t im, int w, int h, int th, int edg,
                                    output rkp_t q[$]);
    img_t sc;
    sc = new[w * h];
    foreach (sc[i]) sc[i] = 0;
    for (int y = 3; y < h - 3; y++)
      for (int x = 3; x < w - 3; x++)
        sc[y * w + x] = fast_score(im, w, x, y, th);
    q.delete();
    for (int y = edg; y < h - edg; y++) begin
      for (int x = edg; x < w - edg; x++) begin
        int s;
        bit ok;
        s = sc[y * w + x];
        ok = s > 0;
        for (int j = -1; j <= 1; j++)
          for (int i = -1; i <= 1; i++) begin
            int n;
            if (i == 0 && j == 0) continue;
            n = sc[(y + j) * w + x + i];
            if (j < 0 || (j == 0 && i < 0)) ok &= s > n;
            else ok &= s >= n;
          end
        if (ok) q.push_back('{x, y, s});
      end
    end
  endfunction

  // 6-bit quantisation followed by 7x7 binomial smoothing; border pixels 0.
  function automatic img_t smooth(img_t im, int w, int h);
    int bk[7] = '{1, 6, 15, 20, 15, 6, 1};
    img_t o;
    o = new[w * h];
    foreach (o[i]) o[i] = 0;
    for (int y = 3; y < h - 3; y++)
      for (int x = 3; x < w - 3; x++) begin
        int acc;
        acc = 2048;
        for (int j = -3; j <= 3; j++)
          for (int i = -3; i <= 3; i++)
            acc += bk[j + 3] * bk[i + 3] * (im[(y + j) * w + (x + i)] >> 2);
        o[y * w + x] = acc >> 12;
      end
    return o;
  endfunction

  function automatic int tanq(int k, int spq);
    if (spq == 4) begin
      int t[4] = '{48, 168, 384, 1280};   // Table 2 of the source, in Q.8
      return t[k];
    end
    return int'($floor($tan((k + 0.5) * (PI / 2.0) / spq) * 256.0 + 0.5));
  endfunction

  function automatic int trig_q(int k, int spq, bit is_sin);
    real a;
    int v;
    a = (k + 0.5) * (PI / 2.0) / spq;
    v = int'($floor((is_sin ? $sin(a) : $cos(a)) * 256.0 + 0.5));
    return (v > 255) ? 255 : v;
  endfunction

  // Orientation of the 37x37 window centred at (x, y) of the smoothed image.
  function automatic void orient(img_t g, int w, int x, int y, int spq,
                                 output int quad, output int sector);
    longint mx, my, ax, ay;
    mx = 0; my = 0;
    for (int j = -18; j <= 18; j++)
      for (int i = -18; i <= 18; i++) begin
        mx += i * g[(y + j) * w + (x + i)];
        my += j * g[(y + j) * w + (x + i)];
      end
    quad = ((mx < 0) ? 2 : 0) + ((my < 0) ? 1 : 0);
    ax = (mx < 0) ? -mx : mx;
    ay = (my < 0) ? -my : my;
    sector = spq - 1;
    for (int k = spq - 1; k >= 0; k--)
      if (ax * tanq(k, spq) > ay * 256) sector = k;
  endfunction

  function automatic int rotc(int a, int b, int c, int s, bit is_y);
    int v;
    v = is_y ? (s * a + c * b) : (c * a - s * b);
    v = int'($floor(real'(v) / 256.0 + 0.5));
    if (v > 18) v = 18;
    if (v < -18) v = -18;
    return v;
  endfunction

  function automatic logic [255:0] descriptor(img_t g, int w, int x, int y,
                                              int quad, int sector, int spq, int np);
    pattern_t pat;
    logic [255:0] d;
    int c, s;
    pat = brief_pattern();
    c = trig_q(sector, spq, 0);
    s = trig_q(sector, spq, 1);
    if (quad & 2) c = -c;
    if (quad & 1) s = -s;
    d = '0;
    for (int i = 0; i < np; i++) begin
      int ax, ay, bx, by;
      ax = rotc(int'(pat[i][3]), int'(pat[i][2]), c, s, 0);
      ay = rotc(int'(pat[i][3]), int'(pat[i][2]), c, s, 1);
      bx = rotc(int'(pat[i][1]), int'(pat[i][0]), c, s, 0);
      by = rotc(int'(pat[i][1]), int'(pat[i][0]), c, s, 1);
      d[i] = g[(y + ay) * w + (x + ax)] > g[(y + by) * w + (x + bx)];
    end
    return d;
  endfunction

  // Full expected output of one level: every keypoint with its descriptor.
  function automatic void level_ref(img_t im, int w, int h, int th, int edg,
                                    int spq, int np, output rdesc_t q[$]);
    rkp_t kq[$];
    img_t g;
    keypoints(im, w, h, th, edg, kq);
    g = smooth(im, w, h);
    q.delete();
    foreach (kq[i]) begin
      rdesc_t r;
      r.x = kq[i].x; r.y = kq[i].y; r.score = kq[i].score;
      orient(g, w, r.x, r.y, spq, r.quad, r.sector);
      r.desc = descriptor(g, w, r.x, r.y, r.quad, r.sector, spq, np);
      q.push_back(r);
    end
  endfunction

  // Synthetic test image: smooth gradient plus bright and dark squares and
  // blobs that give corners with various orientations.
  function automatic img_t make_image(int w, int h, int seed);
    img_t im;
    int unsigned s;
    im = new[w * h];
    s = seed;
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++)
        im[y * w + x] = 60 + ((x * 3 + y * 2) % 40);
    for (int n = 0; n < (w * h) / 150 + 4; n++) begin
      int cx, cy, sz, v;
      s = s * 1103515245 + 12345; cx = int'((s >> 8) % w);
      s = s * 1103515245 + 12345; cy = int'((s >> 8) % h);
      s = s * 1103515245 + 12345; sz = 3 + int'((s >> 8) % 9);
      s = s * 1103515245 + 12345; v  = ((s >> 8) % 2) ? 230 : 10;
      for (int y = cy; y < cy + sz && y < h; y++)
        for (int x = cx; x < cx + sz + (y - cy) / 2 && x < w; x++)
          im[y * w + x] = v;
    end
    return im;
  endfunction
endpackage
