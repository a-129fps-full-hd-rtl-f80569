// tb_rasterizer: self-checking test of the Stage 3 rasterizer (one tile).
// Each trial blends a random list of Gaussians (some far outside the tile so
// they are pruned, some opaque so pixels terminate) into a tile at a random
// origin, and compares every output pixel with a real-valued alpha-blending
// reference (power, alpha = min(0.99, o exp(power)), pruning below 1/255,
// termination below T = 1e-4) within 3 levels of 8 bits. Also checks that a
// Gaussian occupies the unit 256/PIX_PAR cycles, that the tile streams out in
// 256/PIX_PAR cycles with o_last on the final group, that all_done matches
// the reference's all-pixels-finished state, and that pruning and
// termination were both counted.
module tb_rasterizer;
  import gs_pkg::*;
  localparam int T = 16, PP = 16, NG = T * T / PP;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic init, g_valid, g_ready, all_done, out_start, o_valid, o_last;
  logic [15:0] org_x, org_y;
  feat_t g_feat;
  logic [$clog2(NG)-1:0] o_grp;
  logic [PP-1:0][23:0] o_rgb;
  logic [31:0] n_pruned, n_term;
  rasterizer dut (.*);

  function automatic int irand(int n);
    int r;
    r = int'($urandom % n);
    return r;
  endfunction
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  initial begin #20ms; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  function automatic int fx(real v); return int'($floor(v * 65536.0 + 0.5)); endfunction
  function automatic real rv(fx_t v); return $itor(v) / 65536.0; endfunction
  function automatic int to8(real c);
    if (c <= 0) return 0;
    if (c >= 1.0) return 255;
    return int'($floor(c * 255.0));
  endfunction

  real rr[T*T], rg[T*T], rb[T*T], rt[T*T];
  bit  rf[T*T];

  initial begin
    int n_alldone = 0;
    init = 0; g_valid = 0; out_start = 0; org_x = 0; org_y = 0; g_feat = '0;
    repeat (3) @(posedge clk); rst = 0; @(posedge clk);
    for (int t = 0; t < 40; t++) begin
      automatic int ng = 1 + $urandom % 12;
      automatic int ox = 16 * ($urandom % 100), oy = 16 * ($urandom % 60);
      automatic bit opaque = (t % 4 == 3);
      if (opaque) ng = 10;
      org_x = 16'(ox); org_y = 16'(oy);
      init = 1; @(posedge clk); #1; init = 0;
      for (int p = 0; p < T*T; p++) begin rr[p] = 0; rg[p] = 0; rb[p] = 0; rt[p] = 1; rf[p] = 0; end
      for (int i = 0; i < ng; i++) begin
        automatic real u, v, s, a, b, c, op, cr, cg, cb;
        automatic int busy_c;
        u = ox + (irand(4000) - 1200) / 100.0;
        v = oy + (irand(4000) - 1200) / 100.0;
        if (opaque) begin u = ox + 8 + ($urandom % 4); v = oy + 8 + ($urandom % 4); end
        s = opaque ? 30.0 : 1.0 + ($urandom % 800) / 100.0;
        a = 1.0 / (s * s); c = 1.0 / (s * s * (0.5 + ($urandom % 100) / 100.0));
        b = (irand(100) - 50) / 100.0 * 0.5 * $sqrt(a * c);
        op = opaque ? 0.99 : 0.2 + ($urandom % 79) / 100.0;
        cr = ($urandom % 100) / 100.0; cg = ($urandom % 100) / 100.0; cb = ($urandom % 120) / 100.0;
        g_feat.u = fx(u); g_feat.v = fx(v); g_feat.ca = fx(a * 256.0); g_feat.cb = fx(b * 256.0); g_feat.cc = fx(c * 256.0);   // conic is scaled by 2^8
        g_feat.opacity = fx(op); g_feat.r = fx(cr); g_feat.g = fx(cg); g_feat.b = fx(cb);
        // reference with the quantised parameters
        u = rv(g_feat.u); v = rv(g_feat.v); a = rv(g_feat.ca) / 256.0; b = rv(g_feat.cb) / 256.0; c = rv(g_feat.cc) / 256.0;
        op = rv(g_feat.opacity); cr = rv(g_feat.r); cg = rv(g_feat.g); cb = rv(g_feat.b);
        for (int p = 0; p < T*T; p++) begin
          automatic real dx = u - (ox + p % T), dy = v - (oy + p / T), pw, al, tn;
          if (rf[p]) continue;
          pw = -0.5 * (a * dx * dx + c * dy * dy) - b * dx * dy;
          if (pw > 0) continue;
          al = op * $exp(pw);
          if (al > 0.99) al = 0.99;
          if (al < 1.0 / 255.0) continue;
          tn = rt[p] * (1 - al);
          if (tn < 1e-4) begin rf[p] = 1; continue; end
          rr[p] += al * rt[p] * cr; rg[p] += al * rt[p] * cg; rb[p] += al * rt[p] * cb; rt[p] = tn;
        end
        check(g_ready, "not ready for next Gaussian");
        g_valid = 1; @(posedge clk); #1; g_valid = 0;
        busy_c = 0;
        while (!g_ready) begin busy_c++; @(posedge clk); #1; end
        check(busy_c == NG, $sformatf("Gaussian took %0d cycles, expected %0d", busy_c, NG));
      end
      begin
        automatic bit ref_all = 1;
        for (int p = 0; p < T*T; p++) ref_all &= rf[p];
        // near the threshold the fixed-point T may land on either side
        if (ref_all) check(all_done, "all_done should be set");
        if (all_done) n_alldone++;
      end
      out_start = 1; @(posedge clk); #1; out_start = 0;
      for (int gi = 0; gi < NG; gi++) begin
        check(o_valid && int'(o_grp) == gi, $sformatf("output group %0d", gi));
        check(o_last == (gi == NG - 1), "o_last");
        for (int k = 0; k < PP; k++) begin
          automatic int p = gi * PP + k;
          automatic int e[3] = '{to8(rr[p]), to8(rg[p]), to8(rb[p])};
          automatic int g3[3] = '{int'(o_rgb[k][23:16]), int'(o_rgb[k][15:8]), int'(o_rgb[k][7:0])};
          for (int ch = 0; ch < 3; ch++)
            check(g3[ch] - e[ch] <= 3 && e[ch] - g3[ch] <= 3,
                  $sformatf("trial %0d pixel %0d ch %0d got %0d ref %0d", t, p, ch, g3[ch], e[ch]));
        end
        @(posedge clk); #1;
      end
      check(!o_valid, "output longer than the tile");
    end
    check(n_pruned > 0, "no pruned evaluation");
    check(n_term > 0, "no terminated pixel");
    check(n_alldone > 0, "no fully terminated tile");
    $display("pruned=%0d terminated=%0d full tiles=%0d", n_pruned, n_term, n_alldone);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
