// conv_ref_pkg: reference data and direct 3x3 convolution for the testbenches.
//
// Holds one job's input (C x H x W) and filters (K x C x 3 x 3) as double precision
// arrays, computes the transformed filter U = G g G^T with
//   G = [1 0 0; 1/2 1/2 1/2; 1/2 -1/2 1/2; 0 0 1]
// (Lavin's F(2x2,3x3) matrix), and computes the direct stride-1 cross-correlation with
// optional one-pixel zero padding, plus the sum of absolute products used as the error
// scale when comparing against the Winograd result.
package conv_ref_pkg;
  import fp_ref_pkg::*;

  class conv_job;
    int c, k, h, w, pad, ho, wo;
    real x[];     // c*h*w
    real g[];     // k*c*9

    function new(int c_, int k_, int h_, int w_, int pad_);
      c = c_; k = k_; h = h_; w = w_; pad = pad_;
      ho = h + 2 * pad - 2;
      wo = w + 2 * pad - 2;
      x = new[c * h * w];
      g = new[k * c * 9];
      foreach (x[i]) x[i] = f2r(r2f(rand_val()));
      foreach (g[i]) g[i] = f2r(r2f(rand_val()));
    endfunction

    function real px(int ci, int r, int col);   // unpadded coordinates, zero outside
      if (r < 0 || r >= h || col < 0 || col >= w) return 0.0;
      return x[(ci * h + r) * w + col];
    endfunction

    // output (y, xo) of map ko; scale returns the sum of |products|
    function real out(int ko, int y, int xo, output real scale);
      real s = 0.0;
      scale = 0.0;
      for (int ci = 0; ci < c; ci++)
        for (int u = 0; u < 3; u++)
          for (int v = 0; v < 3; v++) begin
            real t;
            t = px(ci, y + u - pad, xo + v - pad) * g[((ko * c + ci) * 3 + u) * 3 + v];
            s += t;
            scale += (t < 0.0) ? -t : t;
          end
      return s;
    endfunction

    // transformed filter, element (i, j) of U for (ko, ci), rounded to fp32
    function fp32_t u(int ko, int ci, int i, int j);
      real gm[4][3];
      real t[4][3];
      real s;
      gm = '{'{1.0, 0.0, 0.0}, '{0.5, 0.5, 0.5}, '{0.5, -0.5, 0.5}, '{0.0, 0.0, 1.0}};
      for (int a = 0; a < 4; a++)
        for (int b = 0; b < 3; b++) begin
          t[a][b] = 0.0;
          for (int m = 0; m < 3; m++) t[a][b] += gm[a][m] * g[((ko * c + ci) * 3 + m) * 3 + b];
        end
      s = 0.0;
      for (int m = 0; m < 3; m++) s += t[i][m] * gm[j][m];
      return r2f(s);
    endfunction
  endclass

endpackage
