// tb_stage1_core: self-checking test of the Stage 1 projection core.
// Random Gaussians seen by a rotated and translated camera. An independent
// real-valued model computes t = V [m;1], the Jacobian J, T = J W,
// cov2D = T Sigma T^T + 0.3 I, its conic (delivered scaled by 2^8), the 3-sigma half extents, the image
// position and the degree-1 SH colour along the viewing direction. Outputs
// are compared with tolerances suited to Q16.16 (image position within half a
// pixel, about the resolution of FP16 at 1080p), and the
// latency from start to done is checked (50 cycles).
module tb_stage1_core;
  import gs_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic start, done, busy, ok;
  grec_t rec; fx_t [11:0] sh; cam_t cam; feat_t feat; fx_t depth, rx, ry;
  stage1_core dut (.*);

  function automatic int irand(int n);
    int r;
    r = int'($urandom % n);
    return r;
  endfunction
  int checks = 0, failures = 0;
  task automatic check(bit c, string what);
    checks++; if (!c) begin failures++; if (failures < 15) $display("FAIL: %s", what); end
  endtask
  initial begin #5ms; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  function automatic int fx(real v); return int'($floor(v * 65536.0 + 0.5)); endfunction
  function automatic real rv(fx_t v); return $itor(v) / 65536.0; endfunction
  function automatic bit near(real got, real want, real rel, real abs_);
    real e; e = got - want; if (e < 0) e = -e;
    return e <= abs_ + rel * ((want < 0) ? -want : want);
  endfunction

  real R[3][3], tt[3], cp[3], f_x, f_y, c_x, c_y, zn;

  initial begin
    real th;
    start = 0; rec = '0; sh = '0; cam = '0;
    th = 0.3;
    R[0][0] = $cos(th); R[0][1] = 0; R[0][2] = -$sin(th);
    R[1][0] = 0;        R[1][1] = 1; R[1][2] = 0;
    R[2][0] = $sin(th); R[2][1] = 0; R[2][2] = $cos(th);
    tt[0] = 0.5; tt[1] = -0.25; tt[2] = 1.0;
    f_x = 1000; f_y = 1000; c_x = 960; c_y = 540; zn = 0.2;
    for (int i = 0; i < 3; i++) begin
      for (int j = 0; j < 3; j++) cam.view[i][j] = fx(R[i][j]);
      cam.view[i][3] = fx(tt[i]);
    end
    // quantised matrix used by the reference as well
    for (int i = 0; i < 3; i++) begin for (int j = 0; j < 3; j++) R[i][j] = rv(cam.view[i][j]); tt[i] = rv(cam.view[i][3]); end
    for (int i = 0; i < 3; i++) begin cp[i] = 0; for (int j = 0; j < 3; j++) cp[i] -= R[j][i] * tt[j]; end
    for (int i = 0; i < 3; i++) begin cam.campos[i] = fx(cp[i]); cp[i] = rv(cam.campos[i]); end
    cam.fx = fx(f_x); cam.fy = fx(f_y); cam.cx = fx(c_x); cam.cy = fx(c_y); cam.znear = fx(zn);
    repeat (3) @(posedge clk); rst = 0; @(posedge clk);
    for (int t = 0; t < 200; t++) begin
      automatic real m[3], S[3][3], sv[12], tv[3], rz, J[2][3], T[2][3], M[2][3], c00, c01, c11, det;
      automatic real ca, cb, cc, u, v, d[3], dn, col[3];
      automatic int lat;
      // centre in camera space, then to world
      begin
        automatic real pc[3];
        pc[2] = 4.0 + ($urandom % 2600) / 100.0;
        pc[0] = pc[2] * (irand(200) - 100) / 100.0;
        pc[1] = pc[2] * (irand(200) - 100) / 180.0;
        for (int i = 0; i < 3; i++) begin m[i] = 0; for (int j = 0; j < 3; j++) m[i] += R[j][i] * (pc[j] - tt[j]); end
      end
      begin
        automatic real sg = 0.001 + ($urandom % 1000) / 4200.0;   // keeps cov2D below the Q16.16 range
        S[0][0] = sg * (0.5 + ($urandom % 100) / 100.0); S[1][1] = sg * (0.5 + ($urandom % 100) / 100.0);
        S[2][2] = sg * (0.5 + ($urandom % 100) / 100.0);
        S[0][1] = 0.3 * sg * (irand(200) - 100) / 100.0; S[0][2] = 0.3 * sg * (irand(200) - 100) / 100.0;
        S[1][2] = 0.3 * sg * (irand(200) - 100) / 100.0;
        S[1][0] = S[0][1]; S[2][0] = S[0][2]; S[2][1] = S[1][2];
      end
      rec.x = fx(m[0]); rec.y = fx(m[1]); rec.z = fx(m[2]);
      rec.s00 = fx(S[0][0]); rec.s01 = fx(S[0][1]); rec.s02 = fx(S[0][2]);
      rec.s11 = fx(S[1][1]); rec.s12 = fx(S[1][2]); rec.s22 = fx(S[2][2]);
      rec.opacity = fx(($urandom % 100) / 100.0); rec.sh_idx = $urandom % 256;
      for (int k = 0; k < 12; k++) begin sh[k] = fx((irand(200) - 100) / 300.0); sv[k] = rv(sh[k]); end
      m[0] = rv(rec.x); m[1] = rv(rec.y); m[2] = rv(rec.z);
      S[0][0] = rv(rec.s00); S[0][1] = rv(rec.s01); S[0][2] = rv(rec.s02); S[1][1] = rv(rec.s11);
      S[1][2] = rv(rec.s12); S[2][2] = rv(rec.s22); S[1][0] = S[0][1]; S[2][0] = S[0][2]; S[2][1] = S[1][2];
      // reference
      for (int i = 0; i < 3; i++) begin tv[i] = tt[i]; for (int j = 0; j < 3; j++) tv[i] += R[i][j] * m[j]; end
      rz = 1.0 / ((tv[2] < zn) ? zn : tv[2]);
      u = f_x * tv[0] * rz + c_x; v = f_y * tv[1] * rz + c_y;
      J[0][0] = f_x * rz; J[0][1] = 0; J[0][2] = -f_x * tv[0] * rz * rz;
      J[1][0] = 0; J[1][1] = f_y * rz; J[1][2] = -f_y * tv[1] * rz * rz;
      for (int a = 0; a < 2; a++) for (int j = 0; j < 3; j++) begin
        T[a][j] = 0; for (int k = 0; k < 3; k++) T[a][j] += J[a][k] * R[k][j];
      end
      for (int a = 0; a < 2; a++) for (int j = 0; j < 3; j++) begin
        M[a][j] = 0; for (int k = 0; k < 3; k++) M[a][j] += T[a][k] * S[k][j];
      end
      c00 = 0.3; c01 = 0; c11 = 0.3;
      for (int k = 0; k < 3; k++) begin c00 += M[0][k] * T[0][k]; c01 += M[1][k] * T[0][k]; c11 += M[1][k] * T[1][k]; end
      det = c00 * c11 - c01 * c01;
      ca = c11 / det; cb = -c01 / det; cc = c00 / det;
      for (int i = 0; i < 3; i++) d[i] = m[i] - cp[i];
      dn = $sqrt(d[0] * d[0] + d[1] * d[1] + d[2] * d[2]);
      for (int i = 0; i < 3; i++) d[i] /= dn;
      for (int c = 0; c < 3; c++) begin
        col[c] = sv[c] - d[1] * sv[3 + c] + d[2] * sv[6 + c] - d[0] * sv[9 + c] + 0.5;
        if (col[c] < 0) col[c] = 0;
      end
      start = 1; @(posedge clk); #1; start = 0; lat = 1;
      while (!done) begin @(posedge clk); #1; lat++; end
      if (t > 0) check(lat == 50, $sformatf("latency %0d", lat));
      check(ok == (det > 0), "ok");
      check(near(rv(feat.u), u, 0, 0.5) && near(rv(feat.v), v, 0, 0.5),
            $sformatf("uv %f %f ref %f %f", rv(feat.u), rv(feat.v), u, v));
      check(near(rv(depth), tv[2], 0, 1e-3), $sformatf("depth %f ref %f", rv(depth), tv[2]));
      check(near(rv(feat.ca) / 256.0, ca, 0.03, 3.0 / 65536 / 256.0) && near(rv(feat.cc) / 256.0, cc, 0.03, 3.0 / 65536 / 256.0) &&
            near(rv(feat.cb) / 256.0, cb, 0.03, 0.02 * $sqrt(ca * cc) + 3.0 / 65536 / 256.0),
            $sformatf("t%0d conic %f %f %f ref %f %f %f", t, rv(feat.ca) / 256.0, rv(feat.cb) / 256.0, rv(feat.cc) / 256.0, ca, cb, cc));
      check(near(rv(rx), 3 * $sqrt(c00), 0.01, 0.05) && near(rv(ry), 3 * $sqrt(c11), 0.01, 0.05),
            $sformatf("extent %f %f ref %f %f", rv(rx), rv(ry), 3 * $sqrt(c00), 3 * $sqrt(c11)));
      for (int c = 0; c < 3; c++) begin
        automatic real gc = (c == 0) ? rv(feat.r) : (c == 1) ? rv(feat.g) : rv(feat.b);
        check(near(gc, col[c], 0, 2e-3), $sformatf("colour %0d %f ref %f", c, gc, col[c]));
      end
      check(feat.opacity == rec.opacity, "opacity");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
