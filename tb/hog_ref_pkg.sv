// hog_ref_pkg: floating-point reference model of the HOG system for the
// end-to-end testbenches.
//
// From a raw Bayer frame it computes the grayscale frame (same integer
// demosaic and luma rule as the RTL, G R / B G mosaic), the gradients with a
// zero border, magnitude and orientation in real arithmetic, the two
// interpolated votes per pixel (each truncated to an integer, as in the
// hardware), 8x8 chist histograms and the L2-normalised 2x2 blocks
// v / sqrt(sum v^2 + eps^2), block after block in raster order, 36 features
// per block (cell0 top-left .. cell3 bottom-right, bins 0..8).
package hog_ref_pkg;

  localparam real PI = 3.14159265358979;

  class hog_ref;
    int  w, h;
    int  raw[];
    int  gray[];
    real feat[];
    real chist[];   // cell histograms, (cy*ncx + cx)*9 + bin
    real eps;

    function new(int w_, int h_, real eps_ = 1.0);
      w = w_;
      h = h_;
      eps = eps_;
      raw  = new[w * h];
      gray = new[w * h];
    endfunction

    static function int colour(int x, int y);
      if (y % 2 == 0) return (x % 2 == 0) ? 1 : 0;
      return (x % 2 == 0) ? 2 : 1;
    endfunction

    function void compute();
      make_gray();
      features();
    endfunction

    // grayscale frame from the raw frame
    function void make_gray();
      for (int y = 0; y < h; y++)
        for (int x = 0; x < w; x++) begin
          int r, g, b;
          r = 0; g = 0; b = 0;
          for (int j = -1; j <= 0; j++)
            for (int i = -1; i <= 0; i++) begin
              int vx, vy, v, c;
              vx = (x + i < 0) ? 0 : x + i;
              vy = (y + j < 0) ? 0 : y + j;
              v  = raw[vy * w + vx];
              c  = colour(x + i < 0 ? x + 1 : x + i, y + j < 0 ? y + 1 : y + j);
              if (c == 0) r += v;
              else if (c == 2) b += v;
              else g += v;
            end
          gray[y * w + x] = ((77 * r + 75 * g + 29 * b) >> 12) & 255;
        end
    endfunction

    // cell histograms and normalised blocks from the grayscale frame
    function void features();
      int ncx = w / 8, ncy = h / 8, nbx = ncx / 2, nby = ncy / 2;
      chist = new[ncx * ncy * 9];
      foreach (chist[i]) chist[i] = 0.0;
      // gradients, votes, cells
      for (int y = 1; y < h - 1; y++)
        for (int x = 1; x < w - 1; x++) begin
          int  gx, gy, bb, c;
          real m, th, u, f;
          gx = gray[y * w + x - 1] - gray[y * w + x + 1];
          gy = gray[(y - 1) * w + x] - gray[(y + 1) * w + x];
          if (gx == 0 && gy == 0) continue;
          m  = $sqrt(real'(gx * gx + gy * gy));
          th = $atan2(real'(gy), real'(gx));
          if (th < 0) th += PI;
          if (th >= PI) th -= PI;
          u = th * 9.0 / PI - 0.5;
          if (u < 0) u += 9.0;
          bb = int'($floor(u));
          if (bb > 8) bb = 8;
          f = u - bb;
          c = ((y / 8) * ncx + x / 8) * 9;
          chist[c + bb]           += $floor(m * (1.0 - f));
          chist[c + (bb + 1) % 9] += $floor(m * f);
        end
      // blocks
      feat = new[nbx * nby * 36];
      for (int by = 0; by < nby; by++)
        for (int bx = 0; bx < nbx; bx++) begin
          real s, v[36];
          s = eps * eps;
          for (int c = 0; c < 4; c++)
            for (int k = 0; k < 9; k++) begin
              v[c*9+k] = chist[((2*by + c/2) * ncx + 2*bx + c%2) * 9 + k];
              s += v[c*9+k] * v[c*9+k];
            end
          for (int i = 0; i < 36; i++) feat[(by * nbx + bx) * 36 + i] = v[i] / $sqrt(s);
        end
    endfunction
  endclass

  // IEEE-754 single to real, decoded field by field
  function automatic real f32(logic [31:0] b);
    real m;
    int  e;
    if (b[30:23] == 0) return 0.0;
    m = 1.0 + real'(b[22:0]) / 8388608.0;
    e = int'(b[30:23]) - 127;
    for (int i = 0; i < e; i++) m = m * 2.0;
    for (int i = 0; i > e; i--) m = m / 2.0;
    return b[31] ? -m : m;
  endfunction

endpackage
