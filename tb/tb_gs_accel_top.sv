// tb_gs_accel_top: end-to-end test of the accelerator at a reduced size.
//
// A 64x48 image (12 tiles) with small per-tile buffers (local buffer 12 keys,
// global buffer 24, tile capacity 36, sub-sorter 8 entries) so that every
// mechanism of the design is exercised by a scene of a few hundred
// Gaussians: near-plane culling, multi-tile duplication, key drops at the
// tile capacity, global-buffer spill, multi-chunk sorting, sorter stalls on
// the rasterizer, alpha pruning, pixel and tile early termination, and the
// frame-level pipeline (preprocessing of frame 2 overlaps rendering of
// frame 1). Each of these is counted and a failure is recorded for any that
// never happens. Every pixel of both frames is compared with the real-valued
// reference of gs_ref_pkg (tolerance in 8-bit levels, since the hardware
// works in fixed point with a polynomial exp); statistics reported by the
// design (culled / visible / keys / dropped) are compared exactly with the
// reference's counts.
module tb_gs_accel_top;
  import gs_pkg::*;
  import gs_ref_pkg::*;

  localparam int W = 64, H = 48, T = 16, NL = 4;
  localparam int NS = 8, LD = 12, GD = 24, CAP = 36, PP = 16;
  localparam int TX = W / T, TY = H / T, NT = TX * TY;
  localparam int NGS = 80;
  localparam int TOL = 6;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic frame_start, frame_ready, frame_done;
  logic [31:0] n_gauss;
  cam_t cam;
  logic mem_req, mem_we, mem_rvalid;
  logic [31:0] mem_addr, mem_wdata, mem_rdata;
  logic [NL-1:0] px_valid;
  logic [NL-1:0][$clog2(NT)-1:0] px_tile;
  logic [NL-1:0][$clog2(T*T/PP)-1:0] px_grp;
  logic [NL-1:0][PP-1:0][23:0] px_rgb;
  logic [31:0] st_culled, st_visible, st_keys, st_dropped;
  logic [NL-1:0][31:0] st_early, st_global, st_chunked, st_stall, st_blended, st_pruned, st_term;

  gs_accel_top #(.IMG_W(W), .IMG_H(H), .TILE(T), .NLANE(NL), .NSORT(NS), .LOCAL_DEPTH(LD),
                 .GLOBAL_DEPTH(GD), .TILE_CAP(CAP), .PIX_PAR(PP), .VIEW_DEPTH(64),
                 .PRE_DEPTH(32), .CB_ENTRIES(256)) dut (.*);
  dram_model #(.LAT(6)) u_dram (.clk, .mem_req, .mem_we, .mem_addr, .mem_wdata,
                                .mem_rvalid, .mem_rdata);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // captured pixels per frame
  int img [2][H][W];
  int seen[2][H][W];
  int fr_out = 0;
  always_ff @(posedge clk) begin
    for (int l = 0; l < NL; l++)
      if (px_valid[l] && !rst) begin
        int tx, ty;
        tx = int'(px_tile[l]) % TX; ty = int'(px_tile[l]) / TX;
        for (int k = 0; k < PP; k++) begin
          int idx; idx = int'(px_grp[l]) * PP + k;
          if (fr_out < 2) begin
            img[fr_out][ty*T + idx/T][tx*T + idx%T] <= int'(px_rgb[l][k]);
            seen[fr_out][ty*T + idx/T][tx*T + idx%T] <= seen[fr_out][ty*T + idx/T][tx*T + idx%T] + 1;
          end
        end
      end
    if (frame_done && !rst) fr_out <= fr_out + 1;
  end

  // overlap of preprocessing and rendering
  int n_overlap = 0;
  always_ff @(posedge clk) if (dut.ren_busy && dut.pre_busy) n_overlap <= n_overlap + 1;

  // watchdog
  initial begin
    #20ms;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  task automatic load_scene();
    for (int i = 0; i < n_g; i++) begin
      u_dram.mem[VIEW_BASE + 4*i + 0] = fx(gx[i]);
      u_dram.mem[VIEW_BASE + 4*i + 1] = fx(gy[i]);
      u_dram.mem[VIEW_BASE + 4*i + 2] = fx(gz[i]);
      u_dram.mem[VIEW_BASE + 4*i + 3] = fx(grad[i]);
      u_dram.mem[REC_BASE + 16*i + 0] = fx(gx[i]);
      u_dram.mem[REC_BASE + 16*i + 1] = fx(gy[i]);
      u_dram.mem[REC_BASE + 16*i + 2] = fx(gz[i]);
      for (int k = 0; k < 6; k++) u_dram.mem[REC_BASE + 16*i + 3 + k] = fx(gs[i][k]);
      u_dram.mem[REC_BASE + 16*i + 9]  = fx(gop[i]);
      u_dram.mem[REC_BASE + 16*i + 10] = gsh[i];
    end
    for (int e = 0; e < 256; e++)
      for (int k = 0; k < 12; k++) u_dram.mem[CB_BASE + 12*e + k] = fx(cb[e][k]);
  endtask

  initial begin
    int r_cul, r_vis, r_keys, r_drop, bad, worst;
    int lst[$], ord[$];
    int sum_early, sum_glob, sum_chunk, sum_stall, sum_blend, sum_prune, sum_term;
    int t0, t1;
    void'($urandom(7));
    gen_scene(NGS, W, H, 0.1, 0.3, 2.5, 0.3, 0.99);
    // eight wide, almost opaque Gaussians in front of everything else: they
    // fill the first sort chunk of every tile and finish the central tiles
    for (int i = 0; i < 8; i++) begin
      gz[i] = 2.0 + i; gx[i] = q(gz[i] * (-0.1 + 0.03 * i)); gy[i] = q(gz[i] * (-0.05 + 0.01 * i));
      gs[i][0] = q(0.5 * gz[i] * gz[i]); gs[i][3] = gs[i][0]; gs[i][5] = gs[i][0];
      gs[i][1] = 0; gs[i][2] = 0; gs[i][4] = 0; gop[i] = 0.99;
      grad[i] = q(3.0 * $sqrt(3.0 * gs[i][0]));
    end
    project(W, H, T);
    load_scene();

    cam = '0;
    cam.view[0][0] = FX_ONE; cam.view[1][1] = FX_ONE; cam.view[2][2] = FX_ONE;
    cam.fx = fx(c_fx); cam.fy = fx(c_fy); cam.cx = fx(c_cx); cam.cy = fx(c_cy);
    cam.znear = fx(c_znear);
    n_gauss = NGS; frame_start = 0;
    repeat (5) @(posedge clk);
    rst = 0;
    repeat (3) @(posedge clk);

    // reference counts
    r_cul = 0; r_vis = 0; r_keys = 0; r_drop = 0;
    for (int i = 0; i < n_g; i++) if (!vis[i]) r_cul++; else r_vis++;
    for (int t = 0; t < NT; t++) begin
      int full[$];
      tile_list(t % TX, t / TX, T, W, H, 1 << 20, full);
      r_keys += (full.size() < CAP) ? full.size() : CAP;
      r_drop += (full.size() > CAP) ? full.size() - CAP : 0;
    end

    // two frames back to back
    t0 = $time;
    for (int f = 0; f < 2; f++) begin
      while (!frame_ready) @(posedge clk);
      frame_start <= 1; @(posedge clk); frame_start <= 0;
      @(posedge clk);
      if (f == 0) begin
        wait (dut.s1_done); @(posedge clk);
        check(st_culled == r_cul, $sformatf("culled %0d ref %0d", st_culled, r_cul));
        check(st_visible == r_vis, $sformatf("visible %0d ref %0d", st_visible, r_vis));
        check(st_keys == r_keys, $sformatf("keys %0d ref %0d", st_keys, r_keys));
        check(st_dropped == r_drop, $sformatf("dropped %0d ref %0d", st_dropped, r_drop));
      end
    end
    wait (fr_out == 2);
    t1 = $time;
    repeat (4) @(posedge clk);

    // pixel comparison
    bad = 0; worst = 0;
    for (int f = 0; f < 2; f++)
      for (int t = 0; t < NT; t++) begin
        tile_list(t % TX, t / TX, T, W, H, CAP, lst);
        blend_order(lst, NS, ord);
        for (int p = 0; p < T*T; p++) begin
          int x, y, ref_rgb;
          x = (t % TX) * T + p % T; y = (t / TX) * T + p / T;
          ref_rgb = shade(ord, x, y);
          check(seen[f][y][x] == 1, $sformatf("pixel %0d,%0d output %0d times", x, y, seen[f][y][x]));
          if (!close(img[f][y][x], ref_rgb, TOL)) begin
            bad++;
            if (bad < 10) $display("pixel f%0d (%0d,%0d) got %06h ref %06h", f, x, y, img[f][y][x], ref_rgb);
          end
          checks++;
        end
      end
    failures += bad;

    sum_early = 0; sum_glob = 0; sum_chunk = 0; sum_stall = 0; sum_blend = 0; sum_prune = 0; sum_term = 0;
    for (int l = 0; l < NL; l++) begin
      sum_early += st_early[l]; sum_glob += st_global[l]; sum_chunk += st_chunked[l];
      sum_stall += st_stall[l]; sum_blend += st_blended[l]; sum_prune += st_pruned[l]; sum_term += st_term[l];
    end
    $display("culled=%0d visible=%0d keys=%0d dropped=%0d early_tiles=%0d global=%0d chunked=%0d stall=%0d blended=%0d pruned=%0d term=%0d overlap=%0d cycles=%0d",
             st_culled, st_visible, st_keys, st_dropped, sum_early, sum_glob, sum_chunk, sum_stall,
             sum_blend, sum_prune, sum_term, n_overlap, (t1 - t0) / 10);
    check(st_culled  > 0, "mechanism: near-plane culling never happened");
    check(st_keys    > st_visible, "mechanism: no Gaussian duplicated to several tiles");
    check(st_dropped > 0, "mechanism: no key dropped at tile capacity");
    check(sum_glob   > 0, "mechanism: global buffer never used");
    check(sum_chunk  > 0, "mechanism: no multi-chunk tile");
    check(sum_stall  > 0, "mechanism: sorter never stalled");
    check(sum_prune  > 0, "mechanism: alpha pruning never happened");
    check(sum_term   > 0, "mechanism: pixel early termination never happened");
    check(sum_early  > 0, "mechanism: tile early termination never happened");
    check(n_overlap  > 0, "mechanism: frame pipeline overlap never happened");
    $display("pixel mismatches: %0d", bad);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
