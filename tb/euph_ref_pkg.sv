// euph_ref_pkg: reference models used by the testbenches.  They compute, in
// plain behavioural code and pixel by pixel, what the RTL computes with its
// own datapath: three-step-search block matching, and the extrapolation of
// one ROI from per-macroblock motion vectors (Eq. 1-3 with sub-ROIs and
// bounding box).  Macroblock size 16 and search range 7 are fixed here.
package euph_ref_pkg;
  localparam int RL = 16;
  localparam int RD = 7;
  localparam int RW = RL + 2*RD;

  typedef logic [7:0] mb_t  [RL][RL];
  typedef logic [7:0] win_t [RW][RW];

  // SAD of candidate offset (u,v)
  function automatic int sad_at(const ref mb_t cur, const ref win_t win, input int u, input int v);
    int s = 0;
    for (int r = 0; r < RL; r++)
      for (int c = 0; c < RL; c++) begin
        int a = cur[r][c];
        int b = win[r+RD+v][c+RD+u];
        s += (a > b) ? a - b : b - a;
      end
    return s;
  endfunction

  // Three-step search: candidates in the order centre, then row-major ring.
  function automatic void ref_tss(const ref mb_t cur, const ref win_t win,
                                  output int bu, output int bv, output int bsad);
    int cu = 0, cv = 0;
    int dxs[8] = '{-1, 0, 1, -1, 1, -1, 0, 1};
    int dys[8] = '{-1, -1, -1, 0, 0, 1, 1, 1};
    bu = 0; bv = 0; bsad = sad_at(cur, win, 0, 0);
    for (int s = 4; s >= 1; s = s / 2) begin
      for (int k = 0; k < 8; k++) begin
        int u = cu + dxs[k]*s, v = cv + dys[k]*s;
        int sd = sad_at(cur, win, u, v);
        if (sd < bsad) begin bsad = sd; bu = u; bv = v; end
      end
      cu = bu; cv = bv;
    end
  endfunction

  function automatic int sx4(input logic [3:0] n);
    return n[3] ? int'(n) - 16 : int'(n);
  endfunction

  // Extrapolate one ROI.  mvb/cfb hold one byte per macroblock (raster, `cols`
  // per row).  prev/mvf are Q.4 filtered vectors of the four sub-ROIs.
  function automatic void ref_extrap(input int x0, input int y0, input int x1, input int y1,
      const ref byte unsigned mvb[], const ref byte unsigned cfb[], input int cols,
      input int prev_u[4], input int prev_v[4], input int thr, input int fw, input int fh,
      output int ox0, output int oy0, output int ox1, output int oy1,
      output int mvf_u[4], output int mvf_v[4], output bit ok[4]);
    int xm = (x0 + x1) / 2, ym = (y0 + y1) / 2;
    int sx0[4], sy0[4], sx1[4], sy1[4];
    int bx0 = fw, by0 = fh, bx1 = 0, by1 = 0;
    bit any = 0;
    sx0 = '{x0, xm, x0, xm}; sx1 = '{xm, x1, xm, x1};
    sy0 = '{y0, y0, ym, ym}; sy1 = '{ym, ym, y1, y1};
    for (int l = 0; l < 4; l++) begin
      longint n = 0, su = 0, sv = 0, sc = 0;
      int mu_u, mu_v, alpha, beta, du, dv;
      for (int y = sy0[l]; y < sy1[l]; y++)
        for (int x = sx0[l]; x < sx1[l]; x++) begin
          int m = (y / RL) * cols + (x / RL);
          n  += 1;
          su += sx4(mvb[m][3:0]);
          sv += sx4(mvb[m][7:4]);
          sc += cfb[m];
        end
      ok[l] = (n != 0);
      if (!ok[l]) begin mvf_u[l] = prev_u[l]; mvf_v[l] = prev_v[l]; continue; end
      mu_u  = int'(((su < 0 ? -su : su) * 16) / n); if (su < 0) mu_u = -mu_u;
      mu_v  = int'(((sv < 0 ? -sv : sv) * 16) / n); if (sv < 0) mu_v = -mu_v;
      alpha = int'(sc / n);
      beta  = (alpha > thr) ? alpha : 128;
      mvf_u[l] = (beta * mu_u + (256 - beta) * prev_u[l]) >>> 8;
      mvf_v[l] = (beta * mu_v + (256 - beta) * prev_v[l]) >>> 8;
      du = (mvf_u[l] + 8) >>> 4;
      dv = (mvf_v[l] + 8) >>> 4;
      any = 1;
      if (sx0[l] - du < bx0) bx0 = sx0[l] - du;
      if (sy0[l] - dv < by0) by0 = sy0[l] - dv;
      if (sx1[l] - du > bx1) bx1 = sx1[l] - du;
      if (sy1[l] - dv > by1) by1 = sy1[l] - dv;
    end
    if (!any) begin ox0 = x0; oy0 = y0; ox1 = x1; oy1 = y1; return; end
    if (bx0 < 0) bx0 = 0;
    if (by0 < 0) by0 = 0;
    if (bx1 > fw) bx1 = fw;
    if (by1 > fh) by1 = fh;
    if (bx1 < bx0) bx1 = bx0;
    if (by1 < by0) by1 = by0;
    ox0 = bx0; oy0 = by0; ox1 = bx1; oy1 = by1;
  endfunction
endpackage
