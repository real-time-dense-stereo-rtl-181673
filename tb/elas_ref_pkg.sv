// elas_ref_pkg: software reference model of the ELAS stereo accelerators.
//
// The testbenches compare the RTL against this model. It works on whole
// frames held in arrays, in plain loops, without any of the line buffers,
// window registers or pipelines of the RTL, so it is an independent
// statement of what each accelerator computes:
//   census(), support_at()  - census descriptor and support match of a pixel
//   support_stream()        - support extraction output, in stream order
//   filter_stream()         - consistency + backward redundancy filtering
//   dense_stream()          - dense matching with grid vectors and priors
// Disparities are ints with -1 meaning "none". A stream array has one
// entry per beat; beat (x, y) of an accelerator with window radius R holds
// the result for pixel (x-R, y-R).
package elas_ref_pkg;

  typedef logic [168:0] desc_t;   // up to 13 x 13 census bits

  class elas_model;
    int w, h, nd;
    int L[], R[];
    desc_t CL[], CR[];   // census of every pixel, for window size cwin
    int cwin = 0;

    function new(int w_, int h_, int nd_);
      w = w_; h = h_; nd = nd_;
      L = new[w*h];
      R = new[w*h];
    endfunction

    function int pix(bit right, int x, int y);
      return right ? R[y*w + x] : L[y*w + x];
    endfunction

    function desc_t census(bit right, int x, int y, int win);
      desc_t c = '0;
      int r = (win - 1) / 2;
      for (int dr = 0; dr < win; dr++)
        for (int dc = 0; dc < win; dc++)
          c[dr*win + dc] = pix(right, x - r + dc, y - r + dr) < pix(right, x, y);
      return c;
    endfunction

    // precompute the census of every pixel for one window size
    function void prepare(int win);
      int r = (win - 1) / 2;
      if (cwin == win) return;
      cwin = win;
      CL = new[w*h];
      CR = new[w*h];
      for (int y = 0; y < h; y++)
        for (int x = 0; x < w; x++)
          if (x >= r && y >= r && x < w - r && y < h - r) begin
            CL[y*w + x] = census(0, x, y, win);
            CR[y*w + x] = census(1, x, y, win);
          end else begin
            CL[y*w + x] = '0;
            CR[y*w + x] = '0;
          end
    endfunction

    static function int thr(int m2);
      return (m2 >> 1) + (m2 >> 2) + (m2 >> 3) + (m2 >> 5);
    endfunction

    // best / second best census cost of left pixel (cx, cy); -1 if rejected
    function int support_at(int cx, int cy, int win);
      int r = (win - 1) / 2;
      desc_t lc;
      int m1, m2, best, n;
      if (cx < r || cy < r || cx > w - 1 - r || cy > h - 1 - r) return -1;
      prepare(win);
      lc = CL[cy*w + cx];
      m1 = 1 << 30; m2 = 1 << 30; best = -1; n = 0;
      for (int d = 0; d < nd; d++) begin
        int c;
        if (cx - d < r) break;
        c = $countones(lc ^ CR[cy*w + cx - d]);
        n++;
        if (c < m1) begin m2 = m1; m1 = c; best = d; end
        else if (c < m2) m2 = c;
      end
      if (n < 2) return -1;
      return (m1 <= thr(m2)) ? best : -1;
    endfunction

    function void support_stream(int win, ref int out[]);
      int r = (win - 1) / 2;
      out = new[w*h];
      for (int y = 0; y < h; y++)
        for (int x = 0; x < w; x++)
          out[y*w + x] = support_at(x - r, y - r, win);
    endfunction

    static function bit close(int a, int b, int t);
      return ((a > b) ? a - b : b - a) <= t;
    endfunction

    // consistency then backward redundancy; counts the removals
    function void filter_stream(ref int in_s[], input int fw, int ithr, int imin, int rd, int rthr,
                                ref int out[], output int n_incon, output int n_redun);
      int f = (fw - 1) / 2;
      int cons[];
      cons = new[w*h];
      out  = new[w*h];
      n_incon = 0; n_redun = 0;
      for (int y = 0; y < h; y++)
        for (int x = 0; x < w; x++) begin
          int cx = x - f, cy = y - f, v, cnt;
          cons[y*w + x] = -1;
          if (cx < 0 || cy < 0) continue;
          v = in_s[cy*w + cx];
          if (v < 0) continue;
          cnt = 0;
          for (int yy = cy - f; yy <= cy + f; yy++)
            for (int xx = cx - f; xx <= cx + f; xx++)
              if (xx >= 0 && yy >= 0 && xx < w && yy < h && in_s[yy*w + xx] >= 0 &&
                  close(in_s[yy*w + xx], v, ithr))
                cnt++;
          if (cnt >= imin) cons[y*w + x] = v;
          else n_incon++;
        end
      for (int y = 0; y < h; y++)
        for (int x = 0; x < w; x++) begin
          int v = cons[y*w + x];
          bit red = 0;
          if (v >= 0)
            for (int k = 1; k <= rd; k++) begin
              if (x >= k && out[y*w + x - k] >= 0 && close(out[y*w + x - k], v, rthr)) red = 1;
              if (y >= k && out[(y-k)*w + x] >= 0 && close(out[(y-k)*w + x], v, rthr)) red = 1;
            end
          out[y*w + x] = red ? -1 : v;
          if (red) n_redun++;
        end
    endfunction

    // dense matching; prior[] per pixel (-1 none), gv[] per grid cell
    function void dense_stream(int win, int grid, int prad, ref int prior[],
                               ref bit [255:0] gv[], ref int out[]);
      int r = (win - 1) / 2;
      int gcols = (w + grid - 1) / grid;
      prepare(win);
      out = new[w*h];
      for (int y = 0; y < h; y++)
        for (int x = 0; x < w; x++) begin
          int cx = x - r, cy = y - r, best, bc;
          desc_t lc;
          out[y*w + x] = -1;
          if (cx < r || cy < r) continue;
          lc = CL[cy*w + cx];
          best = -1; bc = 1 << 30;
          for (int d = 0; d < nd; d++) begin
            int p = prior[cy*w + cx];
            bit in_set;
            int c;
            if (cx - d < r) break;
            in_set = gv[(cy / grid) * gcols + cx / grid][d] ||
                     (p >= 0 && d >= p - prad && d <= p + prad);
            if (!in_set) continue;
            c = $countones(lc ^ CR[cy*w + cx - d]);
            if (c < bc) begin bc = c; best = d; end
          end
          out[y*w + x] = best;
        end
    endfunction

    // textured scene: right(x) = left(x + disp(x, y)); noise where disp < 0
    function void make_scene(int seed, ref int disp[]);
      void'($urandom(seed));
      cwin = 0;
      for (int i = 0; i < w*h; i++) L[i] = int'($urandom() % 256);
      for (int y = 0; y < h; y++)
        for (int x = 0; x < w; x++) begin
          int d = disp[y*w + x];
          if (d >= 0 && x + d < w) R[y*w + x] = L[y*w + x + d];
          else R[y*w + x] = int'($urandom() % 256);
        end
    endfunction
  endclass

endpackage
