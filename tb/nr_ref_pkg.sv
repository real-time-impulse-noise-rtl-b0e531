// nr_ref_pkg -- behavioural reference of the impulse-noise filter, used by the
// testbenches to compute expected outputs independently of the RTL.
//
// It works on a 5x5 neighbourhood addressed by (row, column) offsets from the
// centre and writes each rule out directly: sort by insertion, directional
// sums by walking the line (dr, dc) = step * direction, and so on.  The
// decisions and roundings are the same as those documented in the RTL.
package nr_ref_pkg;

  typedef int unsigned win_t [5][5];   // [row][col], centre at [2][2]

  typedef struct {
    int unsigned t1, t2, t3, t4, t5;
  } ref_thr_t;

  localparam ref_thr_t REF_THR = '{t1: 20, t2: 150, t3: 30, t4: 10, t5: 6};

  // direction vectors: horizontal, vertical, diagonal, anti-diagonal
  localparam int DR [4] = '{0, 1, 1, 1};
  localparam int DC [4] = '{1, 0, 1, -1};

  function automatic int unsigned iabs(int v);
    return (v < 0) ? -v : v;
  endfunction

  function automatic void sort9(input win_t w, output int unsigned f [9]);
    int unsigned a [9];
    int k = 0;
    for (int r = 1; r <= 3; r++) for (int c = 1; c <= 3; c++) a[k++] = w[r][c];
    for (int i = 1; i < 9; i++) begin
      int unsigned key = a[i];
      int j = i - 1;
      while (j >= 0 && a[j] > key) begin a[j+1] = a[j]; j--; end
      a[j+1] = key;
    end
    f = a;
  endfunction

  function automatic int unsigned type2_d(input win_t w, int dir);
    int unsigned s = 0;
    for (int k = -2; k <= 2; k++) begin
      if (k == 0) continue;
      begin
        int unsigned ad = iabs(int'(w[2][2]) - int'(w[2 + k*DR[dir]][2 + k*DC[dir]]));
        s += (k == 1 || k == -1) ? ad : ad / 2;
      end
    end
    return s;
  endfunction

  function automatic int unsigned line_var(input win_t w, int dir);
    int unsigned s = 0, m, v = 0;
    for (int k = -2; k <= 2; k++) if (k != 0) s += w[2 + k*DR[dir]][2 + k*DC[dir]];
    m = s / 4;
    for (int k = -2; k <= 2; k++)
      if (k != 0) v += iabs(int'(w[2 + k*DR[dir]][2 + k*DC[dir]]) - int'(m));
    return v;
  endfunction

  function automatic int unsigned line_median(input win_t w, int dir);
    int unsigned a [4];
    int n = 0;
    for (int k = -2; k <= 2; k++) if (k != 0) a[n++] = w[2 + k*DR[dir]][2 + k*DC[dir]];
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 3 - i; j++)
        if (a[j] > a[j+1]) begin int unsigned t = a[j]; a[j] = a[j+1]; a[j+1] = t; end
    return (a[1] + a[2]) / 2;
  endfunction

  function automatic int unsigned epf1(input win_t w);
    int unsigned best = 1000, res = 0;
    for (int d = 0; d < 4; d++) begin
      int unsigned a = w[2 + DR[d]][2 + DC[d]];
      int unsigned b = w[2 - DR[d]][2 - DC[d]];
      if (iabs(int'(a) - int'(b)) < best) begin
        best = iabs(int'(a) - int'(b));
        res  = (a + b) / 2;
      end
    end
    return res;
  endfunction

  function automatic int unsigned epf2(input win_t w);
    int unsigned best = 100000, res = 0;
    for (int d = 0; d < 4; d++) begin
      if (line_var(w, d) < best) begin
        best = line_var(w, d);
        res  = line_median(w, d);
      end
    end
    return res;
  endfunction

  function automatic int unsigned sim_count(input win_t w, int unsigned t4);
    int unsigned n = 0;
    for (int r = 1; r <= 3; r++)
      for (int c = 1; c <= 3; c++)
        if (!(r == 2 && c == 2) && iabs(int'(w[r][c]) - int'(w[2][2])) < t4) n++;
    return n;
  endfunction

  // class codes match nr_pkg::pix_class_e
  function automatic void ref_pixel(input win_t w, input ref_thr_t t, input bit npc_en,
                                    output int unsigned pix, output int unsigned cls);
    int unsigned f [9];
    int unsigned c = w[2][2];
    int unsigned dmin = 100000;
    bit similar;
    sort9(w, f);
    similar = sim_count(w, t.t4) >= t.t5;
    for (int d = 0; d < 4; d++) if (type2_d(w, d) < dmin) dmin = type2_d(w, d);
    if ((f[5] - f[4]) > t.t1 || (f[4] - f[3]) > t.t1) begin
      if (dmin > t.t2)      begin cls = 3; pix = epf2(w); end
      else if (similar)     begin cls = 1; pix = c; end
      else                  begin cls = 2; pix = (f[3] + f[4] + f[5]) / 3; end
    end else if (iabs(int'(c) - int'(f[3])) > t.t3 && iabs(int'(c) - int'(f[4])) > t.t3 &&
                 iabs(int'(c) - int'(f[5])) > t.t3) begin
      cls = 4; pix = epf1(w);
    end else if (npc_en && ((f[8] - c) < t.t4 || (c - f[0]) < t.t4)) begin
      if (similar)          begin cls = 6; pix = c; end
      else                  begin cls = 7; pix = (f[3] + f[4] + f[5]) / 3; end
    end else begin
      cls = 5; pix = c;
    end
  endfunction

  // Filters a whole W x H image (raster order) once; pixels within two of the
  // frame edge are copied.  cls receives the class of every pixel.
  function automatic void ref_frame(input int unsigned img [], input int w, input int h,
                                    input ref_thr_t t, input bit npc_en,
                                    output int unsigned res [], output int unsigned cls []);
    res = new[w * h];
    cls = new[w * h];
    for (int y = 0; y < h; y++) begin
      for (int x = 0; x < w; x++) begin
        if (x < 2 || x >= w - 2 || y < 2 || y >= h - 2) begin
          res[y*w + x] = img[y*w + x];
          cls[y*w + x] = 0;
        end else begin
          win_t win;
          int unsigned p, c;
          for (int r = 0; r < 5; r++)
            for (int q = 0; q < 5; q++) win[r][q] = img[(y + r - 2)*w + (x + q - 2)];
          ref_pixel(win, t, npc_en, p, c);
          res[y*w + x] = p;
          cls[y*w + x] = c;
        end
      end
    end
  endfunction

  // Synthetic test image: a dark background with a bright elliptical rim, a
  // mid-grey interior with a smooth gradient, and a darker inner blob -- the
  // coarse structure of a head slice.  No file is read.
  function automatic int unsigned phantom(int x, int y, int w, int h);
    int cx = w / 2, cy = h / 2;
    int ax = (w * 2) / 5, ay = (h * 9) / 20;
    // r2 is (x/ax)^2 + (y/ay)^2 scaled by 1024
    int dx = x - cx, dy = y - cy;
    int r2 = (dx * dx * 1024) / (ax * ax) + (dy * dy * 1024) / (ay * ay);
    int bx = dx + w / 10, by = dy - h / 12;
    int b2 = (bx * bx * 1024) / ((ax / 3) * (ax / 3) + 1) + (by * by * 1024) / ((ay / 4) * (ay / 4) + 1);
    if (r2 > 1024) return 12 + ((x + y) % 3);
    if (r2 > 860)  return 215 - (r2 - 860) / 8;
    if (b2 < 1024) return 55 + (b2 / 64);
    return 110 + (x * 40) / w + (y * 20) / h;
  endfunction

endpackage
