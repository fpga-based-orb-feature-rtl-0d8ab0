// orb_ref_pkg: behavioural reference model of the ORB pipeline for the
// testbenches. Everything here is computed directly from the definitions
// (whole-image arrays, no streaming), so a testbench can compare the RTL with
// values obtained in a different way:
//   test images, bilinear 1/1.2 resize, FAST-9 test, disc moments,
//   word-length reduction and sin/cos, 7x7 Gaussian, steered BRIEF, and the
//   full list of feature records a frame should produce, in output order.
package orb_ref_pkg;

  typedef int unsigned img_t [];

  typedef struct {
    int              level;
    int              x, y, xf, yf;
    logic [255:0]    desc;
  } rec_t;

  // ---- test image: gradient, random rectangles and noise ----------------
  function automatic img_t make_image(int w, int h, int unsigned seed);
    img_t img;
    int   rx [24], ry [24], rw [24], rh [24], rv [24];
    img = new[w * h];
    for (int k = 0; k < 24; k++) begin
      seed = seed * 1103515245 + 12345; rx[k] = int'((seed >> 8) % w);
      seed = seed * 1103515245 + 12345; ry[k] = int'((seed >> 8) % h);
      seed = seed * 1103515245 + 12345; rw[k] = 4 + int'((seed >> 8) % 20);
      seed = seed * 1103515245 + 12345; rh[k] = 4 + int'((seed >> 8) % 20);
      seed = seed * 1103515245 + 12345; rv[k] = int'((seed >> 8) % 256);
    end
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        int v;
        v = 60 + (x * 40) / w + (y * 30) / h;
        for (int k = 0; k < 24; k++)
          if (x >= rx[k] && x < rx[k] + rw[k] && y >= ry[k] && y < ry[k] + rh[k]) v = rv[k];
        seed = seed * 1103515245 + 12345;
        v = v + int'((seed >> 16) % 7) - 3;
        if (v < 0) v = 0;
        if (v > 255) v = 255;
        img[y * w + x] = v;
      end
    return img;
  endfunction

  // ---- level 2 by the direct bilinear formula -----------------------------
  function automatic img_t resize(img_t img, int w, int h);
    img_t o;
    int   w2, h2;
    w2 = (5 * w) / 6;
    h2 = (5 * h) / 6;
    o = new[w2 * h2];
    for (int v = 0; v < h2; v++)
      for (int u = 0; u < w2; u++) begin
        int x0, y0, fx, fy, s;
        x0 = (6 * u) / 5; fx = (6 * u) % 5;
        y0 = (6 * v) / 5; fy = (6 * v) % 5;
        s = (5 - fx) * (5 - fy) * img[y0 * w + x0] + fx * (5 - fy) * img[y0 * w + x0 + 1]
          + (5 - fx) * fy * img[(y0 + 1) * w + x0] + fx * fy * img[(y0 + 1) * w + x0 + 1];
        o[v * w2 + u] = (s + 12) / 25;
      end
    return o;
  endfunction

  // ---- FAST-9, threshold 20 ------------------------------------------------
  function automatic bit fast(img_t img, int w, int x, int y);
    int dx [16] = '{0, 1, 2, 3, 3, 3, 2, 1, 0, -1, -2, -3, -3, -3, -2, -1};
    int dy [16] = '{-3, -3, -2, -1, 0, 1, 2, 3, 3, 3, 2, 1, 0, -1, -2, -3};
    int c;
    c = int'(img[y * w + x]);
    for (int s = 0; s < 16; s++) begin
      int nb, nd;
      nb = 0; nd = 0;
      for (int j = 0; j < 9; j++) begin
        int p;
        p = int'(img[(y + dy[(s + j) % 16]) * w + x + dx[(s + j) % 16]]);
        if (p > c + 20) nb++;
        if (p < c - 20) nd++;
      end
      if (nb == 9 || nd == 9) return 1;
    end
    return 0;
  endfunction

  function automatic void moments(img_t img, int w, int x, int y, output int m10, output int m01);
    m10 = 0; m01 = 0;
    for (int j = -15; j <= 15; j++)
      for (int i = -15; i <= 15; i++)
        if (i * i + j * j <= 225) begin
          m10 += i * int'(img[(y + j) * w + x + i]);
          m01 += j * int'(img[(y + j) * w + x + i]);
        end
  endfunction

  // ---- orientation with an n-bit word length --------------------------------
  function automatic void orient(int m10, int m01, int n, output int s, output int c);
    int a, b, top, sh, sq;
    longint root, rad;
    a = m10 < 0 ? -m10 : m10;
    b = m01 < 0 ? -m01 : m01;
    top = -1;
    for (int i = 0; i < 20; i++) if (((a | b) >> i) & 1) top = i;
    if (top < 0) begin s = 0; c = 256; return; end
    sh = top - (n - 1);
    if (sh >= 0) begin a = a >> sh; b = b >> sh; end
    else         begin a = a << -sh; b = b << -sh; end
    sq   = a * a + b * b;
    rad  = longint'(sq) * 65536;
    root = longint'($sqrt(real'(rad)));
    while (root * root > rad) root--;
    while ((root + 1) * (root + 1) <= rad) root++;
    s = int'((longint'(b) * 65536 + root / 2) / root);
    c = int'((longint'(a) * 65536 + root / 2) / root);
    if (m01 < 0) s = -s;
    if (m10 < 0) c = -c;
  endfunction

  // ---- 7x7 Gaussian of one pixel (interior only) ----------------------------
  function automatic int gauss(img_t img, int w, int x, int y);
    int g [7] = '{5, 8, 12, 14, 12, 8, 5};
    int acc;
    acc = 0;
    for (int j = 0; j < 7; j++)
      for (int i = 0; i < 7; i++)
        acc += g[j] * g[i] * int'(img[(y + j - 3) * w + x + i - 3]);
    return (acc + 2048) >> 12;
  endfunction

  // ---- BRIEF pattern, generated by the documented rule ----------------------
  function automatic void pattern(output int ax [256], output int ay [256],
                                  output int bx [256], output int by [256]);
    int unsigned s;
    int n;
    s = 32'h2545_F491;
    n = 0;
    for (int t = 0; t < 1024; t++) begin
      int c [4];
      for (int j = 0; j < 4; j++) begin
        c[j] = 0;
        for (int k = 0; k < 4; k++) begin
          s = s ^ (s << 13); s = s ^ (s >> 17); s = s ^ (s << 5);
          c[j] += int'(s % 11) - 5;
        end
      end
      if (n < 256 && c[0]*c[0] + c[1]*c[1] <= 169 && c[2]*c[2] + c[3]*c[3] <= 169 &&
          (c[0] != c[2] || c[1] != c[3])) begin
        ax[n] = c[0]; ay[n] = c[1]; bx[n] = c[2]; by[n] = c[3];
        n++;
      end
    end
  endfunction

  function automatic int rnd_shift8(int v);
    // floor((v + 128) / 256) for any sign
    v = v + 128;
    return v >= 0 ? v / 256 : -((-v + 255) / 256);
  endfunction

  function automatic int clamp15(int v);
    return v > 15 ? 15 : (v < -15 ? -15 : v);
  endfunction

  // Descriptor from a 31x31 window given as a function of (dx,dy) offsets.
  function automatic logic [255:0] brief(int win [31][31], int s, int c);
    int ax [256], ay [256], bx [256], by [256];
    logic [255:0] d;
    pattern(ax, ay, bx, by);
    for (int i = 0; i < 256; i++) begin
      int pax, pay, pbx, pby;
      pax = clamp15(rnd_shift8(ax[i] * c + ay[i] * s));
      pay = clamp15(rnd_shift8(ay[i] * c - ax[i] * s));
      pbx = clamp15(rnd_shift8(bx[i] * c + by[i] * s));
      pby = clamp15(rnd_shift8(by[i] * c - bx[i] * s));
      d[i] = win[pay + 15][pax + 15] >= win[pby + 15][pbx + 15];
    end
    return d;
  endfunction

  // ---- all records of one level, in raster order ----------------------------
  function automatic void level_records(img_t img, int w, int h, int level, ref rec_t q [$]);
    for (int y = 20; y <= h - 21; y++)
      for (int x = 20; x <= w - 21; x++)
        if (fast(img, w, x, y)) begin
          int   m10, m01, s, c;
          int   win [31][31];
          rec_t r;
          moments(img, w, x, y, m10, m01);
          orient(m10, m01, 8, s, c);
          for (int j = 0; j < 31; j++)
            for (int i = 0; i < 31; i++)
              win[j][i] = gauss(img, w, x + i - 15, y + j - 15);
          r.level = level;
          r.x = x; r.y = y;
          r.xf = level ? (6 * x + 2) / 5 : x;
          r.yf = level ? (6 * y + 2) / 5 : y;
          r.desc = brief(win, s, c);
          q.push_back(r);
        end
  endfunction

  function automatic void frame_records(img_t img, int w, int h, ref rec_t q [$]);
    img_t img2;
    img2 = resize(img, w, h);
    level_records(img, w, h, 0, q);
    level_records(img2, (5 * w) / 6, (5 * h) / 6, 1, q);
  endfunction

endpackage
