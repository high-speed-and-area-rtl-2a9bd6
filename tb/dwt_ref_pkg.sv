// dwt_ref_pkg: software reference for the testbenches.
//
// lift53() is the integer 5/3 lifting transform of one line with whole-
// sample symmetric extension, written directly from the two equations
//   H(n) = X(2n+1) - floor((X(2n) + X(2n+2)) / 2)
//   L(n) = X(2n)   + floor((H(n-1) + H(n) + 2) / 4)
// with X(len) = X(len-2) and H(-1) = H(0). dwt2d() applies it in place to
// an N x N image, level by level on the top-left LL corner, a vertical pass
// (columns) then a horizontal pass (rows), L to the first half of each line
// and H to the second half.
package dwt_ref_pkg;

  localparam int MAXN = 64;

  typedef int line_t [MAXN];
  typedef int img_t  [MAXN][MAXN];

  function automatic void lift53(input line_t x, input int len,
                                 output line_t l, output line_t h);
    int half;
    int xn;
    int hp;
    half = len / 2;
    for (int n = 0; n < half; n++) begin
      xn   = (2*n + 2 < len) ? x[2*n + 2] : x[2*n];
      h[n] = x[2*n + 1] - ((x[2*n] + xn) >>> 1);
    end
    for (int n = 0; n < half; n++) begin
      hp   = (n == 0) ? h[0] : h[n-1];
      l[n] = x[2*n] + ((hp + h[n] + 2) >>> 2);
    end
  endfunction

  function automatic void dwt2d(ref img_t img, input int n, input int levels);
    line_t x, l, h;
    int nl;
    for (int lv = 0; lv < levels; lv++) begin
      nl = n >> lv;
      // vertical pass: every column is a line
      for (int c = 0; c < nl; c++) begin
        for (int r = 0; r < nl; r++) x[r] = img[r][c];
        lift53(x, nl, l, h);
        for (int k = 0; k < nl/2; k++) begin
          img[k][c]        = l[k];
          img[nl/2 + k][c] = h[k];
        end
      end
      // horizontal pass: every row is a line
      for (int r = 0; r < nl; r++) begin
        for (int c = 0; c < nl; c++) x[c] = img[r][c];
        lift53(x, nl, l, h);
        for (int k = 0; k < nl/2; k++) begin
          img[r][k]        = l[k];
          img[r][nl/2 + k] = h[k];
        end
      end
    end
  endfunction

endpackage
