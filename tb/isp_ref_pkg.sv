// isp_ref_pkg: reference models used by the testbenches.
//
// Plain whole-frame models of the node functions, written from the
// definitions (not from the streaming RTL): each works on a complete image
// held in a dynamic array, index y*W + x, and replicates the border by
// clamping coordinates.
package isp_ref_pkg;

  function automatic int clampi(int v, int lo, int hi);
    return (v < lo) ? lo : (v > hi) ? hi : v;
  endfunction

  function automatic int at(const ref int img[], input int w, input int h, input int x, input int y);
    return img[clampi(y, 0, h - 1) * w + clampi(x, 0, w - 1)];
  endfunction

  // 3x3 Gaussian [1 2 1; 2 4 2; 1 2 1] / 16, rounded.
  function automatic void gauss(input int w, input int h, const ref int src[], ref int dst[]);
    dst = new[w * h];
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        int s;
        s = 0;
        for (int dy = -1; dy <= 1; dy++)
          for (int dx = -1; dx <= 1; dx++)
            s += at(src, w, h, x + dx, y + dy) * ((dx == 0 ? 2 : 1) * (dy == 0 ? 2 : 1));
        dst[y * w + x] = (s + 8) / 16;
      end
  endfunction

  // Canny: Sobel, L1 magnitude, 4-sector direction, NMS, 3x3 hysteresis.
  function automatic void canny(input int w, input int h, input int tl, input int th,
                                const ref int src[], ref int dst[]);
    int mag[], dir[], cls[];
    mag = new[w * h];
    dir = new[w * h];
    cls = new[w * h];
    dst = new[w * h];
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        int gx, gy, ax, ay, d;
        gx = at(src, w, h, x + 1, y - 1) + 2 * at(src, w, h, x + 1, y) + at(src, w, h, x + 1, y + 1)
           - at(src, w, h, x - 1, y - 1) - 2 * at(src, w, h, x - 1, y) - at(src, w, h, x - 1, y + 1);
        gy = at(src, w, h, x - 1, y + 1) + 2 * at(src, w, h, x, y + 1) + at(src, w, h, x + 1, y + 1)
           - at(src, w, h, x - 1, y - 1) - 2 * at(src, w, h, x, y - 1) - at(src, w, h, x + 1, y - 1);
        ax = gx < 0 ? -gx : gx;
        ay = gy < 0 ? -gy : gy;
        // sector boundaries at tan(22.5) ~ 106/256 and tan(67.5) ~ 618/256
        if (256 * ay <= 106 * ax)      d = 0;
        else if (256 * ay >= 618 * ax) d = 2;
        else if ((gx < 0) == (gy < 0)) d = 1;
        else                           d = 3;
        mag[y * w + x] = ax + ay;
        dir[y * w + x] = d;
      end
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        int m, n1, n2, c;
        m = mag[y * w + x];
        case (dir[y * w + x])
          0: begin n1 = at(mag, w, h, x - 1, y);     n2 = at(mag, w, h, x + 1, y);     end
          1: begin n1 = at(mag, w, h, x - 1, y - 1); n2 = at(mag, w, h, x + 1, y + 1); end
          2: begin n1 = at(mag, w, h, x, y - 1);     n2 = at(mag, w, h, x, y + 1);     end
          default: begin n1 = at(mag, w, h, x + 1, y - 1); n2 = at(mag, w, h, x - 1, y + 1); end
        endcase
        c = 0;
        if (m >= n1 && m >= n2) c = (m > th) ? 2 : (m > tl) ? 1 : 0;
        cls[y * w + x] = c;
      end
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        bit has_strong;
        has_strong = 0;
        for (int dy = -1; dy <= 1; dy++)
          for (int dx = -1; dx <= 1; dx++)
            if (at(cls, w, h, x + dx, y + dy) == 2) has_strong = 1;
        dst[y * w + x] = (cls[y * w + x] == 2 || (cls[y * w + x] == 1 && has_strong)) ? 255 : 0;
      end
  endfunction

  // Histogram-equalization table of one image: lut[v] = floor(255*cdf(v)/N).
  function automatic void he_lut(const ref int src[], ref int lut[]);
    longint hist[256];
    longint cdf;
    lut = new[256];
    foreach (hist[i]) hist[i] = 0;
    foreach (src[i]) hist[src[i]]++;
    cdf = 0;
    for (int v = 0; v < 256; v++) begin
      cdf += hist[v];
      lut[v] = int'((cdf * 255) / longint'(src.size()));
    end
  endfunction

  // Gray-world gains (8.8 fixed point) from the three channel images.
  function automatic void cc_gains(const ref int r[], const ref int g[], const ref int b[],
                                   output int gain[3]);
    longint s[3], tot;
    s[0] = 0; s[1] = 0; s[2] = 0;
    foreach (r[i]) begin s[0] += r[i]; s[1] += g[i]; s[2] += b[i]; end
    tot = s[0] + s[1] + s[2];
    for (int c = 0; c < 3; c++) begin
      longint q;
      q = (s[c] == 0) ? 65535 : (tot * 256) / (3 * s[c]);
      gain[c] = int'(q > 65535 ? 65535 : q);
    end
  endfunction

  function automatic int cc_apply(int v, int gain);
    int p;
    p = (v * gain + 128) >>> 8;
    return p > 255 ? 255 : p;
  endfunction

  // Test image: smooth gradients, a bright rectangle and noise; seed selects
  // a variant.
  function automatic void make_image(input int w, input int h, input int seed, ref int img[]);
    img = new[w * h];
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        int v;
        v = (x * 97 + y * 31 + seed * 53) % 160 + 20;
        if (x > w / 4 + seed % 3 && x < (3 * w) / 4 && y > h / 3 && y < (2 * h) / 3 + seed % 2) v += 70;
        v += int'($urandom_range(0, 12));
        img[y * w + x] = v > 255 ? 255 : v;
      end
  endfunction

endpackage
