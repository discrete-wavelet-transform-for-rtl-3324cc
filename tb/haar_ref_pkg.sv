// haar_ref_pkg: floating-point reference model of the DWT segmentation, for
// the testbenches.
//
// The model follows the textbook multi-level 2D Haar transform with the
// orthonormal filters h = [1, 1]/sqrt(2), g = [1, -1]/sqrt(2): each level
// maps a 2x2 block [a b; c d] to LL = (a+b+c+d)/2, H = (a+b-c-d)/2,
// V = (a-b+c-d)/2, D = (a-b-c+d)/2, extending an odd last row or column by
// repeating it. The inverse runs level by level from the coarsest, with LL_J
// set to zero (diffraction estimate), every detail set to zero (background
// estimate) or nothing set to zero (full reconstruction), and crops each level back to its original size. It shares no
// code or scaling with the integer RTL.
package haar_ref_pkg;

  class haar_ref #(int unsigned W = 24, int unsigned H = 168, int unsigned J = 4);
    real img  [H][W];
    real lvl_h[J+1][H][W];
    real lvl_v[J+1][H][W];
    real lvl_d[J+1][H][W];
    real ll   [H][W];
    real rec  [H][W];
    int unsigned dw [J+1];
    int unsigned dh [J+1];

    function void forward();
      real a [H][W];
      real n [H][W];
      int unsigned w, h;
      a = img;
      w = W; h = H;
      dw[0] = W; dh[0] = H;
      for (int unsigned j = 1; j <= J; j++) begin
        int unsigned ow, oh;
        ow = (w + 1) / 2; oh = (h + 1) / 2;
        for (int unsigned r = 0; r < oh; r++) begin
          for (int unsigned c = 0; c < ow; c++) begin
            int unsigned r1, c1;
            real a00, a01, a10, a11;
            r1 = (2*r + 1 < h) ? 2*r + 1 : h - 1;
            c1 = (2*c + 1 < w) ? 2*c + 1 : w - 1;
            a00 = a[2*r][2*c]; a01 = a[2*r][c1];
            a10 = a[r1][2*c];  a11 = a[r1][c1];
            n[r][c]           = (a00 + a01 + a10 + a11) / 2.0;
            lvl_h[j][r][c]    = (a00 + a01 - a10 - a11) / 2.0;
            lvl_v[j][r][c]    = (a00 - a01 + a10 - a11) / 2.0;
            lvl_d[j][r][c]    = (a00 - a01 - a10 + a11) / 2.0;
          end
        end
        a = n;
        w = ow; h = oh;
        dw[j] = w; dh[j] = h;
      end
      ll = a;
    endfunction

    // mode 0: diffraction estimate (LL_J zeroed)
    // mode 1: background estimate (details zeroed)
    // mode 2: full reconstruction (nothing zeroed)
    function void inverse(int mode);
      bit keep_ll, keep_det;
      real a [H][W];
      real n [H][W];
      keep_ll  = (mode != 0);
      keep_det = (mode != 1);
      for (int unsigned r = 0; r < H; r++)
        for (int unsigned c = 0; c < W; c++)
          a[r][c] = keep_ll ? ll[r][c] : 0.0;
      for (int unsigned j = J; j >= 1; j--) begin
        for (int unsigned r = 0; r < dh[j-1]; r++) begin
          for (int unsigned c = 0; c < dw[j-1]; c++) begin
            real sh, sv, det;
            sh = (r % 2 == 0) ? 1.0 : -1.0;
            sv = (c % 2 == 0) ? 1.0 : -1.0;
            det = !keep_det ? 0.0 :
                  sh * lvl_h[j][r/2][c/2] + sv * lvl_v[j][r/2][c/2] +
                  sh * sv * lvl_d[j][r/2][c/2];
            n[r][c] = (a[r/2][c/2] + det) / 2.0;
          end
        end
        a = n;
      end
      rec = a;
    endfunction
  endclass

endpackage
