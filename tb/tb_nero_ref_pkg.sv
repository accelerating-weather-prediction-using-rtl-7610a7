// tb_nero_ref_pkg: builds random test windows for the accelerator and their
// expected results, independently of the RTL.
//
// vadvc window: GROUPS*32 columns, DEPTH levels, four coefficient fields
// (sub-diagonal a, diagonal b, super-diagonal c, right-hand side d) of a
// diagonally dominant tridiagonal system per column. Input line order:
// level-major, then field, then column group. Expected output: the Thomas
// solution, line order level-major then group.
// hdiff window: PLANES planes of ROWS rows of 32 points; expected output from
// the Laplacian/flux formula with the 2-point halo copied.
// All arithmetic is the float32 reference of tb_fp_pkg.
package tb_nero_ref_pkg;
  import tb_fp_pkg::*;

  localparam int L = 32;
  typedef logic [L*32-1:0] line_t;

  function automatic logic [31:0] rnd(input real lo, input real hi);
    return r2f(lo + (hi - lo) * real'($urandom_range(1000000)) / 1000000.0);
  endfunction

  task automatic make_vadvc_window(input int G, input int D, ref line_t win_in[$], ref line_t win_out[$]);
    logic [31:0] a [][], b [][], c [][], d [][], x [][];
    logic [31:0] cp [], dp [], m;
    int cols;
    cols = G * L;
    a = new[D]; b = new[D]; c = new[D]; d = new[D]; x = new[D];
    for (int k = 0; k < D; k++) begin
      a[k] = new[cols]; b[k] = new[cols]; c[k] = new[cols]; d[k] = new[cols]; x[k] = new[cols];
    end
    cp = new[D]; dp = new[D];
    for (int col = 0; col < cols; col++) begin
      for (int k = 0; k < D; k++) begin
        a[k][col] = (k == 0) ? 32'h0 : rnd(-1.0, 1.0);
        c[k][col] = (k == D - 1) ? 32'h0 : rnd(-1.0, 1.0);
        b[k][col] = rnd(3.0, 5.0);
        d[k][col] = rnd(-10.0, 10.0);
      end
      for (int k = 0; k < D; k++) begin
        m = (k == 0) ? b[k][col] : rsub(b[k][col], rmul(a[k][col], cp[k-1]));
        cp[k] = rdiv(c[k][col], m);
        dp[k] = (k == 0) ? rdiv(d[k][col], m) : rdiv(rsub(d[k][col], rmul(a[k][col], dp[k-1])), m);
      end
      for (int k = D - 1; k >= 0; k--)
        x[k][col] = (k == D - 1) ? dp[k] : rsub(dp[k], rmul(cp[k], x[k+1][col]));
    end
    for (int k = 0; k < D; k++) begin
      for (int f = 0; f < 4; f++)
        for (int g = 0; g < G; g++) begin
          line_t ln;
          for (int l = 0; l < L; l++)
            ln[l*32 +: 32] = (f == 0) ? a[k][g*L+l] : (f == 1) ? b[k][g*L+l] :
                             (f == 2) ? c[k][g*L+l] : d[k][g*L+l];
          win_in.push_back(ln);
        end
      for (int g = 0; g < G; g++) begin
        line_t ln;
        for (int l = 0; l < L; l++) ln[l*32 +: 32] = x[k][g*L+l];
        win_out.push_back(ln);
      end
    end
  endtask

  task automatic make_hdiff_window(input int R, input int P, input logic [31:0] c1,
                                   ref line_t win_in[$], ref line_t win_out[$]);
    logic [31:0] s [][];
    s = new[R];
    for (int r = 0; r < R; r++) s[r] = new[L];
    for (int p = 0; p < P; p++) begin
      for (int r = 0; r < R; r++) begin
        line_t ln;
        for (int col = 0; col < L; col++) begin
          s[r][col] = rnd(-50.0, 50.0);
          ln[col*32 +: 32] = s[r][col];
        end
        win_in.push_back(ln);
      end
      for (int r = 0; r < R; r++) begin
        line_t ln;
        for (int col = 0; col < L; col++) begin
          if (r >= 2 && r < R - 2 && col >= 2 && col < L - 2) begin
            logic [31:0] lc, lcp, lcm, lrp, lrm, fc, fcm, fr, frm;
            lc  = lap(s, r, col);
            lcp = lap(s, r, col + 1);
            lcm = lap(s, r, col - 1);
            lrp = lap(s, r + 1, col);
            lrm = lap(s, r - 1, col);
            fc  = rsub(lcp, lc);
            fcm = rsub(lc, lcm);
            fr  = rsub(lrp, lc);
            frm = rsub(lc, lrm);
            ln[col*32 +: 32] = rsub(s[r][col], rmul(c1, radd(rsub(fc, fcm), rsub(fr, frm))));
          end else begin
            ln[col*32 +: 32] = s[r][col];
          end
        end
        win_out.push_back(ln);
      end
    end
  endtask

  function automatic logic [31:0] lap(ref logic [31:0] s [][], input int r, input int c);
    logic [31:0] nb;
    nb = radd(radd(radd(s[r][c+1], s[r][c-1]), s[r+1][c]), s[r-1][c]);
    return rsub(rmul(32'h4080_0000, s[r][c]), nb);
  endfunction

endpackage
