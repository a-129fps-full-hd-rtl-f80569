// tb_render_lane: self-checking test of one render lane (Stages 2 and 3:
// key-list load, local and global key buffers, chunked comparison-free
// sorting, feature fetch, rasterization and tile output) with the global
// buffer and the behavioural DRAM. A 64x48 image (12 tiles) is rendered with
// a local buffer of 10 keys, a global buffer of 20 and 8-entry sort chunks.
// Feature records and key lists are produced by the real-valued reference
// model and written to DRAM; the tile counts are played by the test. Checks
// every pixel against the reference blending (chunk by chunk, nearest first,
// within 6 levels of 8 bits), that every tile is output once, and that the
// lane used the global buffer, sorted multi-chunk tiles, stalled the sorter
// on the rasterizer, pruned, terminated pixels and ended tiles early.
module tb_render_lane;
  import gs_pkg::*;
  import gs_ref_pkg::*;
  localparam int W = 64, H = 48, T = 16, TX = 4, NT = 12, CAP = 30, LD = 10, GD = 20, NS = 8, PP = 16;
  localparam int TW = $clog2(NT), CW = $clog2(CAP + 1), GAW = $clog2(GD), NGS = 70;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic start, done, busy, rreq, rgnt, rvalid, g_acq, g_gnt, g_we, g_re, px_valid;
  logic [TW-1:0] cnt_tile, px_tile; logic [CW-1:0] cnt_val;
  logic [31:0] raddr, rdata, g_wdata, g_rdata;
  logic [GAW-1:0] g_waddr, g_raddr;
  logic [3:0] px_grp; logic [PP-1:0][23:0] px_rgb;
  logic [31:0] n_tiles, n_early, n_global, n_chunked, n_stall, n_blended, n_pruned, n_term;
  logic parity = 1'b0;
  render_lane #(.LANE_ID(0), .NLANE(1), .IMG_W(W), .IMG_H(H), .TILE(T), .TILE_CAP(CAP), .LOCAL_DEPTH(LD),
                .GLOBAL_DEPTH(GD), .NSORT(NS), .PIX_PAR(PP)) dut (.*);
  kv_global_buffer #(.NLANE(1), .DEPTH(GD)) u_gb (.clk, .rst, .acq(g_acq), .gnt(g_gnt), .we(g_we),
    .waddr(g_waddr), .wdata(g_wdata), .re(g_re), .raddr(g_raddr), .rdata(g_rdata));
  logic mem_req, mem_we, mem_rvalid; logic [31:0] mem_addr, mem_wdata, mem_rdata;
  logic [0:0] cli_gnt, cli_rvalid; logic [31:0] cli_rdata;
  mem_ctrl #(.NCLI(1)) u_mc (.clk, .rst, .cli_req(rreq), .cli_we(1'b0), .cli_addr(raddr), .cli_wdata(32'h0),
    .cli_gnt, .cli_rvalid, .cli_rdata, .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_rvalid, .mem_rdata);
  dram_model #(.LAT(6)) u_dram (.clk, .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_rvalid, .mem_rdata);
  assign rgnt = cli_gnt[0]; assign rvalid = cli_rvalid[0]; assign rdata = cli_rdata;

  int counts[NT];
  assign cnt_val = CW'(counts[cnt_tile]);

  int checks = 0, failures = 0;
  task automatic check(bit c, string what);
    checks++; if (!c) begin failures++; if (failures < 15) $display("FAIL: %s", what); end
  endtask
  initial begin #20ms; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  int img[H][W], seen[H][W];
  always_ff @(posedge clk) if (px_valid && !rst)
    for (int k = 0; k < PP; k++) begin
      automatic int idx = int'(px_grp) * PP + k;
      automatic int x = (int'(px_tile) % TX) * T + idx % T, y = (int'(px_tile) / TX) * T + idx / T;
      img[y][x] <= int'(px_rgb[k]); seen[y][x] <= seen[y][x] + 1;
    end

  initial begin
    int bad;
    void'($urandom(3));
    gen_scene(NGS, W, H, 0.0, 0.3, 2.0, 0.3, 0.99);
    for (int i = 0; i < 4; i++) begin          // opaque layers over the middle
      gz[i] = 2.0 + i; gx[i] = q(gz[i] * 0.05); gy[i] = 0;
      gs[i][0] = q(0.3 * gz[i] * gz[i]); gs[i][3] = gs[i][0]; gs[i][5] = gs[i][0]; gs[i][1] = 0; gop[i] = 0.99;
    end
    project(W, H, T);
    // features as written by Stage 1 (from the reference projection)
    for (int i = 0; i < NGS; i++) begin
      automatic int fb = FEAT_BASE + 16 * i;
      u_dram.mem[fb + 0] = fx(pu[i]); u_dram.mem[fb + 1] = fx(pv[i]); u_dram.mem[fb + 2] = fx(pa[i] * 256.0);
      u_dram.mem[fb + 3] = fx(pb[i] * 256.0); u_dram.mem[fb + 4] = fx(pc[i] * 256.0); u_dram.mem[fb + 5] = fx(gop[i]);
      u_dram.mem[fb + 6] = fx(pr[i]); u_dram.mem[fb + 7] = fx(pg[i]); u_dram.mem[fb + 8] = fx(pbl[i]);
    end
    for (int t = 0; t < NT; t++) begin
      automatic int lst[$];
      tile_list(t % TX, t / TX, T, W, H, CAP, lst);
      counts[t] = lst.size();
      foreach (lst[k]) u_dram.mem[LIST_BASE + t * CAP + k] = {1'b0, 15'(pkey[lst[k]]), 16'(lst[k])};
    end
    start = 0;
    repeat (4) @(posedge clk); #1 rst = 0;
    @(posedge clk); #1 start = 1; @(posedge clk); #1 start = 0;
    while (!done) @(posedge clk);
    repeat (5) @(posedge clk);
    bad = 0;
    for (int t = 0; t < NT; t++) begin
      automatic int lst[$], ord[$];
      tile_list(t % TX, t / TX, T, W, H, CAP, lst);
      blend_order(lst, NS, ord);
      for (int p = 0; p < T * T; p++) begin
        automatic int x = (t % TX) * T + p % T, y = (t / TX) * T + p / T;
        automatic int r = shade(ord, x, y);
        check(seen[y][x] == 1, $sformatf("pixel %0d,%0d output %0d times", x, y, seen[y][x]));
        check(close(img[y][x], r, 6), $sformatf("pixel %0d,%0d got %06h ref %06h", x, y, img[y][x], r));
      end
    end
    $display("tiles=%0d early=%0d global=%0d chunked=%0d stall=%0d blended=%0d pruned=%0d term=%0d",
             n_tiles, n_early, n_global, n_chunked, n_stall, n_blended, n_pruned, n_term);
    check(n_tiles == NT, "tile count");
    check(n_global > 0, "global buffer never used");
    check(n_chunked > 0, "no multi-chunk tile");
    check(n_stall > 0, "sorter never stalled");
    check(n_pruned > 0, "no pruning");
    check(n_term > 0, "no pixel termination");
    check(n_early > 0, "no tile early termination");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
