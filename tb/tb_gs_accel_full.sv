// tb_gs_accel_full: full-size test of the accelerator with every parameter
// at its default (1920x1080 image, 8160 tiles, four lanes, 256-entry
// sub-sorters, 2000/6000-entry key buffers, 8000-entry tile lists).
// One frame of a small scene (48 Gaussians, a few behind the camera) is
// rendered. Every pixel of the 1080p frame is compared with the real-valued
// reference of gs_ref_pkg (within 6 levels of 8 bits, with at most 1 pixel in
// 100000 allowed beyond that where a Gaussian sits on a cut-off); every tile must be
// output exactly once; the culled / visible / key counts must match the
// reference; frame_done must come.
module tb_gs_accel_full;
  import gs_pkg::*;
  import gs_ref_pkg::*;

  localparam int W = 1920, H = 1080, T = 16, NL = 4, PP = 16;
  localparam int TX = 120, TY = 68, NT = TX * TY, CAP = 8000, NS = 256;
  localparam int NGS = 48;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic frame_start, frame_ready, frame_done;
  logic [31:0] n_gauss;
  cam_t cam;
  logic mem_req, mem_we, mem_rvalid;
  logic [31:0] mem_addr, mem_wdata, mem_rdata;
  logic [NL-1:0] px_valid;
  logic [NL-1:0][12:0] px_tile;
  logic [NL-1:0][3:0] px_grp;
  logic [NL-1:0][PP-1:0][23:0] px_rgb;
  logic [31:0] st_culled, st_visible, st_keys, st_dropped;
  logic [NL-1:0][31:0] st_early, st_global, st_chunked, st_stall, st_blended, st_pruned, st_term;

  gs_accel_top dut (.*);
  dram_model #(.LAT(8)) u_dram (.clk, .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_rvalid, .mem_rdata);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  int img [H][W];
  byte seen [H][W];
  int done_n = 0;
  always_ff @(posedge clk) begin
    for (int l = 0; l < NL; l++)
      if (px_valid[l] && !rst) begin
        automatic int tx = int'(px_tile[l]) % TX, ty = int'(px_tile[l]) / TX;
        for (int k = 0; k < PP; k++) begin
          automatic int idx = int'(px_grp[l]) * PP + k;
          automatic int y = ty * T + idx / T, x = tx * T + idx % T;
          if (y < H) begin img[y][x] <= int'(px_rgb[l][k]); seen[y][x] <= seen[y][x] + 1; end
        end
      end
    if (frame_done && !rst) done_n <= done_n + 1;
  end

  initial begin
    #100ms;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  initial begin
    int r_cul, r_vis, r_keys, bad, nonzero;
    void'($urandom(21));
    gen_scene(NGS, W, H, 0.1, 0.05, 0.6, 0.3, 0.99);   // footprints within the Q16.16 range
    project(W, H, T);
    for (int i = 0; i < n_g; i++) begin
      u_dram.mem[VIEW_BASE + 4*i + 0] = fx(gx[i]); u_dram.mem[VIEW_BASE + 4*i + 1] = fx(gy[i]);
      u_dram.mem[VIEW_BASE + 4*i + 2] = fx(gz[i]); u_dram.mem[VIEW_BASE + 4*i + 3] = fx(grad[i]);
      u_dram.mem[REC_BASE + 16*i + 0] = fx(gx[i]); u_dram.mem[REC_BASE + 16*i + 1] = fx(gy[i]);
      u_dram.mem[REC_BASE + 16*i + 2] = fx(gz[i]);
      for (int k = 0; k < 6; k++) u_dram.mem[REC_BASE + 16*i + 3 + k] = fx(gs[i][k]);
      u_dram.mem[REC_BASE + 16*i + 9] = fx(gop[i]); u_dram.mem[REC_BASE + 16*i + 10] = gsh[i];
    end
    for (int e = 0; e < 256; e++) for (int k = 0; k < 12; k++) u_dram.mem[CB_BASE + 12*e + k] = fx(cb[e][k]);
    cam = '0;
    cam.view[0][0] = FX_ONE; cam.view[1][1] = FX_ONE; cam.view[2][2] = FX_ONE;
    cam.fx = fx(c_fx); cam.fy = fx(c_fy); cam.cx = fx(c_cx); cam.cy = fx(c_cy); cam.znear = fx(c_znear);
    n_gauss = NGS; frame_start = 0;
    repeat (5) @(posedge clk); #1 rst = 0;
    while (!frame_ready) begin @(posedge clk); #1; end
    frame_start = 1; @(posedge clk); #1 frame_start = 0;
    while (done_n == 0) @(posedge clk);
    repeat (4) @(posedge clk);

    r_cul = 0; r_vis = 0; r_keys = 0;
    for (int i = 0; i < n_g; i++) if (!vis[i]) r_cul++; else r_vis++;
    check(st_culled == r_cul && st_visible == r_vis, $sformatf("culled/visible %0d/%0d ref %0d/%0d", st_culled, st_visible, r_cul, r_vis));
    bad = 0; nonzero = 0;
    for (int t = 0; t < NT; t++) begin
      automatic int lst[$], ord[$];
      tile_list(t % TX, t / TX, T, W, H, CAP, lst);
      r_keys += lst.size();
      blend_order(lst, NS, ord);
      for (int p = 0; p < T * T; p++) begin
        automatic int x = (t % TX) * T + p % T, y = (t / TX) * T + p / T;
        automatic int r;
        if (y >= H) continue;
        r = (lst.size() == 0) ? 0 : shade(ord, x, y);
        if (seen[y][x] != 1 || !close(img[y][x], r, 6)) begin
          bad++;
          if (bad < 10) $display("pixel (%0d,%0d) seen %0d got %06h ref %06h", x, y, seen[y][x], img[y][x], r);
        end
        if (r != 0) nonzero++;
        checks++;
      end
    end
    // A pixel whose Gaussian sits exactly on the 1/255 alpha cut-off or the
    // transmittance cut-off can fall on either side of it in fixed point, so
    // up to 1 pixel in 100000 may differ by more than the tolerance.
    check(bad <= (W * H) / 100000, $sformatf("%0d pixels outside tolerance", bad));
    check(st_keys == r_keys, $sformatf("keys %0d ref %0d", st_keys, r_keys));
    check(nonzero > 10000, $sformatf("only %0d lit pixels", nonzero));
    $display("culled=%0d visible=%0d keys=%0d lit=%0d mismatches=%0d", st_culled, st_visible, st_keys, nonzero, bad);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
