// gs_ref_pkg: floating-point reference model of the accelerator, used by the
// testbenches. It generates a random scene, works out the projection of every
// Gaussian (real arithmetic), builds the per-tile key lists in the order the
// hardware fills them, orders each list the way the hardware does (chunks of
// NSORT keys, nearest first inside a chunk, ties to the earlier entry) and
// alpha-blends every pixel. Nothing here is shared with the RTL except the
// DRAM layout constants and the key encoding of gs_pkg.
package gs_ref_pkg;
  import gs_pkg::*;

  localparam int MAXG = 2048;

  // scene
  real gx[MAXG], gy[MAXG], gz[MAXG], grad[MAXG], gop[MAXG];
  real gs[MAXG][6];           // s00 s01 s02 s11 s12 s22
  int  gsh[MAXG];
  real cb[256][12];
  int  n_g;

  // camera (identity rotation, camera at the origin)
  real c_fx, c_fy, c_cx, c_cy, c_znear;

  // projection results
  bit  vis[MAXG], okp[MAXG];
  real pu[MAXG], pv[MAXG], pa[MAXG], pb[MAXG], pc[MAXG], pr[MAXG], pg[MAXG], pbl[MAXG], prx[MAXG], pry[MAXG], pz[MAXG];
  int  pkey[MAXG];

  function automatic real q(real v);     // round to a multiple of 1/256
    return $floor(v * 256.0 + 0.5) / 256.0;
  endfunction

  function automatic int fx(real v);
    return int'($floor(v * 65536.0 + 0.5));
  endfunction

  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * ($urandom % 100000) / 100000.0;
  endfunction

  // Random scene in front of the camera; frac_behind of them behind it.
  function automatic void gen_scene(int n, int w, int h, real frac_behind, real smin, real smax,
                                    real opmin, real opmax);
    n_g = n;
    c_fx = w * 0.8; c_fy = w * 0.8; c_cx = w / 2.0; c_cy = h / 2.0; c_znear = 0.2;
    for (int e = 0; e < 256; e++)
      for (int k = 0; k < 12; k++)
        cb[e][k] = (k < 3) ? q(urand(0.0, 0.6)) : q(urand(-0.15, 0.15));
    for (int i = 0; i < n; i++) begin
      real z, s, r;
      z = q(urand(1.5, 12.0));
      if (urand(0.0, 1.0) < frac_behind) z = -z;
      gz[i] = z;
      gx[i] = q(urand(-0.6, 0.6) * ((z > 0) ? z : -z));
      gy[i] = q(urand(-0.35, 0.35) * ((z > 0) ? z : -z));
      s = urand(smin, smax) * ((z > 0) ? z : -z) / 10.0;
      gs[i][0] = q(s * s * urand(0.5, 1.5)); gs[i][3] = q(s * s * urand(0.5, 1.5));
      gs[i][5] = q(s * s * urand(0.5, 1.5));
      gs[i][1] = q(0.3 * s * s * urand(-1.0, 1.0)); gs[i][2] = 0.0; gs[i][4] = 0.0;
      r = 3.0 * $sqrt(gs[i][0] + gs[i][3] + gs[i][5]);
      grad[i] = q(r);
      gop[i]  = q(urand(opmin, opmax));
      gsh[i]  = $urandom % 256;
    end
  endfunction

  function automatic void project(int w, int h, int tile);
    for (int i = 0; i < n_g; i++) begin
      real tz, rz, j00, j02, j11, j12, t0[3], t1[3], m0[3], m1[3], s[3][3];
      real c00, c01, c11, det, dn, nx, ny, nz;
      vis[i] = !((gz[i] + grad[i]) < c_znear);
      okp[i] = 0;
      if (!vis[i]) continue;
      pz[i] = gz[i];
      tz  = (gz[i] < c_znear) ? c_znear : gz[i];
      rz  = 1.0 / tz;
      j00 = c_fx * rz; j11 = c_fy * rz; j02 = -c_fx * gx[i] * rz * rz; j12 = -c_fy * gy[i] * rz * rz;
      pu[i] = c_fx * gx[i] * rz + c_cx; pv[i] = c_fy * gy[i] * rz + c_cy;
      s[0][0] = gs[i][0]; s[0][1] = gs[i][1]; s[0][2] = gs[i][2];
      s[1][0] = gs[i][1]; s[1][1] = gs[i][3]; s[1][2] = gs[i][4];
      s[2][0] = gs[i][2]; s[2][1] = gs[i][4]; s[2][2] = gs[i][5];
      t0[0] = j00; t0[1] = 0; t0[2] = j02; t1[0] = 0; t1[1] = j11; t1[2] = j12;
      for (int c = 0; c < 3; c++) begin
        m0[c] = 0; m1[c] = 0;
        for (int k = 0; k < 3; k++) begin m0[c] += t0[k] * s[k][c]; m1[c] += t1[k] * s[k][c]; end
      end
      c00 = 0.3; c01 = 0; c11 = 0.3;
      for (int k = 0; k < 3; k++) begin c00 += m0[k] * t0[k]; c01 += m1[k] * t0[k]; c11 += m1[k] * t1[k]; end
      det = c00 * c11 - c01 * c01;
      okp[i] = det > 0;
      pa[i] = c11 / det; pb[i] = -c01 / det; pc[i] = c00 / det;
      prx[i] = 3.0 * $sqrt(c00); pry[i] = 3.0 * $sqrt(c11);
      dn = $sqrt(gx[i] * gx[i] + gy[i] * gy[i] + gz[i] * gz[i]);
      nx = gx[i] / dn; ny = gy[i] / dn; nz = gz[i] / dn;
      pr[i]  = cb[gsh[i]][0] - ny * cb[gsh[i]][3] + nz * cb[gsh[i]][6] - nx * cb[gsh[i]][9] + 0.5;
      pg[i]  = cb[gsh[i]][1] - ny * cb[gsh[i]][4] + nz * cb[gsh[i]][7] - nx * cb[gsh[i]][10] + 0.5;
      pbl[i] = cb[gsh[i]][2] - ny * cb[gsh[i]][5] + nz * cb[gsh[i]][8] - nx * cb[gsh[i]][11] + 0.5;
      if (pr[i] < 0) pr[i] = 0;
      if (pg[i] < 0) pg[i] = 0;
      if (pbl[i] < 0) pbl[i] = 0;
      pkey[i] = int'(depth_key(fx_t'(fx(tz))));
    end
  endfunction

  // Gaussians covering tile (tx, ty), in the order the hardware lists them.
  function automatic void tile_list(int tx, int ty, int tile, int w, int h, int cap,
                                    ref int lst[$]);
    int ntx, nty;
    ntx = (w + tile - 1) / tile; nty = (h + tile - 1) / tile;
    lst.delete();
    for (int i = 0; i < n_g; i++) begin
      int x0, x1, y0, y1;
      if (!vis[i] || !okp[i]) continue;
      x0 = int'($floor((pu[i] - prx[i]) / tile)); x1 = int'($floor((pu[i] + prx[i]) / tile));
      y0 = int'($floor((pv[i] - pry[i]) / tile)); y1 = int'($floor((pv[i] + pry[i]) / tile));
      if (x1 < 0 || y1 < 0 || x0 >= ntx || y0 >= nty) continue;
      if (tx >= x0 && tx <= x1 && ty >= y0 && ty <= y1 && lst.size() < cap) lst.push_back(i);
    end
  endfunction

  // Order of blending: chunk by chunk, largest key first, ties to the earlier entry.
  function automatic void blend_order(ref int lst[$], input int nsort, ref int ord[$]);
    ord.delete();
    for (int b = 0; b < lst.size(); b += nsort) begin
      int m; bit used[];
      m = (lst.size() - b < nsort) ? lst.size() - b : nsort;
      used = new[m];
      for (int r = 0; r < m; r++) begin
        int best; best = -1;
        for (int j = 0; j < m; j++)
          if (!used[j] && (best < 0 || pkey[lst[b + j]] > pkey[lst[b + best]])) best = j;
        used[best] = 1;
        ord.push_back(lst[b + best]);
      end
    end
  endfunction

  // Blend one pixel; returns packed 8-bit RGB.
  function automatic int shade(ref int ord[$], int px, int py);
    real t, cr, cg, cbv;
    t = 1.0; cr = 0; cg = 0; cbv = 0;
    foreach (ord[k]) begin
      int i; real dx, dy, pw, al, tn;
      i = ord[k];
      dx = pu[i] - px; dy = pv[i] - py;
      pw = -0.5 * (pa[i] * dx * dx + pc[i] * dy * dy) - pb[i] * dx * dy;
      if (pw > 0) continue;
      al = gop[i] * $exp(pw);
      if (al > 0.99) al = 0.99;
      if (al < 1.0 / 255.0) continue;
      tn = t * (1 - al);
      if (tn < 0.0001) break;
      cr += al * t * pr[i]; cg += al * t * pg[i]; cbv += al * t * pbl[i];
      t = tn;
    end
    return (to8(cr) << 16) | (to8(cg) << 8) | to8(cbv);
  endfunction

  function automatic int to8(real c);
    if (c <= 0) return 0;
    if (c >= 1.0) return 255;
    return int'($floor(c * 255.0));
  endfunction

  function automatic bit close(int a, int b, int tol);
    for (int s = 0; s < 24; s += 8) begin
      int da; da = ((a >> s) & 255) - ((b >> s) & 255);
      if (da > tol || da < -tol) return 0;
    end
    return 1;
  endfunction
endpackage
