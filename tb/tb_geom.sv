// tb_geom: reference models shared by the testbenches.
//
// Pixel geometry is found here by plain enumeration (scan every (q, r) of the
// bounding square and keep those with |q|, |r|, |q + r| <= R), independently
// of the closed-form index used in the design.  ref_parallax recomputes the
// L3 parallaxwidth with 64-bit integer arithmetic from the formula
//   width^2 = sum |r_k - <r>|^2 / k
// written as (k sum|r|^2 - |sum r|^2) / k^2, with the same truncating
// divisions the hardware is specified to use.
package tb_geom;

  function automatic int tb_npix(int rad);
    int n;
    n = 0;
    for (int r = -rad; r <= rad; r++)
      for (int q = -rad; q <= rad; q++)
        if ((q + r) <= rad && (q + r) >= -rad) n++;
    return n;
  endfunction

  function automatic void tb_qr(int rad, int idx, output int qo, output int ro);
    int n;
    n = 0; qo = 0; ro = 0;
    for (int r = -rad; r <= rad; r++)
      for (int q = -rad; q <= rad; q++)
        if ((q + r) <= rad && (q + r) >= -rad) begin
          if (n == idx) begin qo = q; ro = r; end
          n++;
        end
  endfunction

  function automatic int tb_idx(int rad, int qi, int ri);
    int n;
    n = 0;
    for (int r = -rad; r <= rad; r++)
      for (int q = -rad; q <= rad; q++)
        if ((q + r) <= rad && (q + r) >= -rad) begin
          if (q == qi && r == ri) return n;
          n++;
        end
    return -1;
  endfunction

  function automatic bit tb_adjacent(int q1, int r1, int q2, int r2);
    int dq, dr, ds;
    dq = q2 - q1; dr = r2 - r1; ds = dq + dr;
    if (dq < 0) dq = -dq;
    if (dr < 0) dr = -dr;
    if (ds < 0) ds = -ds;
    return (dq + dr + ds) == 2;
  endfunction

  function automatic longint sdiv(longint a, longint b);
    longint qa;
    qa = (a < 0 ? -a : a) / (b < 0 ? -b : b);
    return ((a < 0) != (b < 0)) ? -qa : qa;
  endfunction

  // Reference parallaxwidth^2.  use[i]: telescope takes part; sx2/sr: moments;
  // tx/ty: positions.  Returns width^2 (0 if no crossing) and the number of
  // crossings and angle-cut pairs.
  function automatic longint ref_parallax(int ntel, bit use_t[], int sx2[], int sr[],
                                          int tx[], int ty[], int sin2_q8,
                                          output int k, output int ncut);
    longint dx[], dy[];
    longint s1x, s1y, s2, den, cr, cx, cy, d2i, d2j, num;
    dx = new[ntel]; dy = new[ntel];
    for (int i = 0; i < ntel; i++) begin
      dx[i] = sx2[i];
      dy[i] = (longint'(sr[i]) * 887) >>> 9;
    end
    k = 0; ncut = 0; s1x = 0; s1y = 0; s2 = 0;
    for (int i = 0; i < ntel - 1; i++)
      for (int j = i + 1; j < ntel; j++)
        if (use_t[i] && use_t[j]) begin
          den = dx[i]*dy[j] - dy[i]*dx[j];
          d2i = dx[i]*dx[i] + dy[i]*dy[i];
          d2j = dx[j]*dx[j] + dy[j]*dy[j];
          // 256 den^2 >= sin2 d2i d2j, compared as reals to avoid overflow
          if (den == 0 || 256.0*real'(den)*real'(den) < real'(sin2_q8)*real'(d2i)*real'(d2j)) begin
            ncut++;
          end else begin
            cr = (longint'(tx[j]) - tx[i])*dy[j] - (longint'(ty[j]) - ty[i])*dx[j];
            cx = tx[i] + sdiv(dx[i]*cr, den);
            cy = ty[i] + sdiv(dy[i]*cr, den);
            k++;
            s1x += cx; s1y += cy; s2 += cx*cx + cy*cy;
          end
        end
    if (k == 0) return 0;
    num = k*s2 - s1x*s1x - s1y*s1y;
    return num / (k*k);
  endfunction

endpackage
