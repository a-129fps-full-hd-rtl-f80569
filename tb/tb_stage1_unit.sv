// tb_stage1_unit: self-checking test of Stage 1 (record fetch, Preprocess
// SRAM, codebook dequantization, projection core, feature write-back and
// Duplicate) with the tile counters and the behavioural DRAM, on a 64x48
// image with a tile capacity of 20 so that keys are dropped.
// The projection FIFO is played by the test from the real-valued culling
// result. Checks: number projected; every feature record in DRAM against the
// real-valued projection (position, conic, colour, opacity); every tile's
// count and key list (tile membership, list order, key and value) against
// the reference lists, the number of keys written and dropped.
module tb_stage1_unit;
  import gs_pkg::*;
  import gs_ref_pkg::*;
  localparam int W = 64, H = 48, T = 16, TX = 4, TY = 3, NT = 12, CAP = 20, NGS = 60;
  localparam int TW = $clog2(NT), CW = $clog2(CAP + 1);
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic start, src_done, done, busy, p_valid, p_pop, rreq, rgnt, rvalid, wreq, wgnt;
  logic tc_inc, tc_full, tc_busy;
  logic [TW-1:0] tc_tile; logic [CW-1:0] tc_cnt;
  logic [31:0] raddr, rdata, waddr, wdata, n_proj, n_keys, n_drop;
  cam_t cam; gidx_t p_gidx;
  logic parity = 1'b1;
  stage1_unit #(.IMG_W(W), .IMG_H(H), .TILE(T), .TILE_CAP(CAP), .PRE_DEPTH(16)) dut (.*);

  logic [0:0][TW-1:0] rd_tile; logic [0:0][CW-1:0] rd_cnt;
  tile_counter #(.NTILES(NT), .TILE_CAP(CAP), .NRD(1)) u_tc (.clk, .rst, .clear(start), .clear_bank(parity),
    .busy(tc_busy), .inc(tc_inc), .inc_bank(parity), .inc_tile(tc_tile), .inc_cnt(tc_cnt), .inc_full(tc_full),
    .rd_bank(parity), .rd_tile, .rd_cnt);

  logic [1:0] cli_gnt, cli_rvalid;
  logic [31:0] cli_rdata;
  logic mem_req, mem_we, mem_rvalid;
  logic [31:0] mem_addr, mem_wdata, mem_rdata;
  mem_ctrl #(.NCLI(2)) u_mc (.clk, .rst, .cli_req({wreq, rreq}), .cli_we(2'b10), .cli_addr({waddr, raddr}),
    .cli_wdata({wdata, 32'h0}), .cli_gnt, .cli_rvalid, .cli_rdata, .mem_req, .mem_we, .mem_addr,
    .mem_wdata, .mem_rvalid, .mem_rdata);
  dram_model #(.LAT(5)) u_dram (.clk, .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_rvalid, .mem_rdata);
  assign rgnt = cli_gnt[0]; assign wgnt = cli_gnt[1]; assign rvalid = cli_rvalid[0]; assign rdata = cli_rdata;

  int checks = 0, failures = 0;
  task automatic check(bit c, string what);
    checks++; if (!c) begin failures++; if (failures < 15) $display("FAIL: %s", what); end
  endtask
  initial begin #10ms; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  function automatic real rv(logic [31:0] v); return $itor($signed(v)) / 65536.0; endfunction
  function automatic bit near(real got, real want, real rel, real abs_);
    real e; e = got - want; if (e < 0) e = -e;
    return e <= abs_ + rel * ((want < 0) ? -want : want);
  endfunction

  int visq[$];
  initial begin
    int nvis, rkeys, rdrop;
    void'($urandom(5));
    gen_scene(NGS, W, H, 0.1, 0.3, 2.0, 0.3, 0.9);
    project(W, H, T);
    for (int i = 0; i < NGS; i++) begin
      u_dram.mem[REC_BASE + 16*i + 0] = fx(gx[i]); u_dram.mem[REC_BASE + 16*i + 1] = fx(gy[i]);
      u_dram.mem[REC_BASE + 16*i + 2] = fx(gz[i]);
      for (int k = 0; k < 6; k++) u_dram.mem[REC_BASE + 16*i + 3 + k] = fx(gs[i][k]);
      u_dram.mem[REC_BASE + 16*i + 9] = fx(gop[i]); u_dram.mem[REC_BASE + 16*i + 10] = gsh[i];
      if (vis[i]) visq.push_back(i);
    end
    for (int e = 0; e < 256; e++) for (int k = 0; k < 12; k++) u_dram.mem[CB_BASE + 12*e + k] = fx(cb[e][k]);
    nvis = visq.size();
    cam = '0; cam.view[0][0] = FX_ONE; cam.view[1][1] = FX_ONE; cam.view[2][2] = FX_ONE;
    cam.fx = fx(c_fx); cam.fy = fx(c_fy); cam.cx = fx(c_cx); cam.cy = fx(c_cy); cam.znear = fx(c_znear);
    start = 0; src_done = 0; p_valid = 0; p_gidx = '0; rd_tile = '0;
    repeat (4) @(posedge clk); #1 rst = 0;
    while (tc_busy) @(posedge clk);
    #1 start = 1; @(posedge clk); #1 start = 0;
    // projection FIFO played by the test, with gaps
    foreach (visq[k]) begin
      while ($urandom % 4 == 0) @(posedge clk);
      #1 p_valid = 1; p_gidx = gidx_t'(visq[k]);
      @(posedge clk); while (!p_pop) @(posedge clk);
      #1 p_valid = 0;
    end
    src_done = 1;
    while (!done) @(posedge clk);
    repeat (20) @(posedge clk);
    check(n_proj == nvis, $sformatf("projected %0d of %0d", n_proj, nvis));
    foreach (visq[k]) begin
      automatic int i = visq[k];
      automatic int fb = FEAT_BASE + (int'(parity) << 24) + 16 * i;
      check(near(rv(u_dram.mem[fb + 0]), pu[i], 0, 0.05) && near(rv(u_dram.mem[fb + 1]), pv[i], 0, 0.05), $sformatf("g%0d position", i));
      check(near(rv(u_dram.mem[fb + 2]) / 256.0, pa[i], 0.03, 4.0 / 65536 / 256.0) && near(rv(u_dram.mem[fb + 4]) / 256.0, pc[i], 0.03, 4.0 / 65536 / 256.0) &&
            near(rv(u_dram.mem[fb + 3]) / 256.0, pb[i], 0.03, 0.02 * $sqrt(pa[i] * pc[i]) + 4.0 / 65536 / 256.0), $sformatf("g%0d conic", i));
      check(u_dram.mem[fb + 5] == fx(gop[i]), $sformatf("g%0d opacity", i));
      check(near(rv(u_dram.mem[fb + 6]), pr[i], 0, 2e-3) && near(rv(u_dram.mem[fb + 7]), pg[i], 0, 2e-3) &&
            near(rv(u_dram.mem[fb + 8]), pbl[i], 0, 2e-3), $sformatf("g%0d colour", i));
    end
    rkeys = 0; rdrop = 0;
    for (int t = 0; t < NT; t++) begin
      automatic int lst[$], full[$];
      tile_list(t % TX, t / TX, T, W, H, CAP, lst);
      tile_list(t % TX, t / TX, T, W, H, 1 << 20, full);
      rkeys += lst.size(); rdrop += full.size() - lst.size();
      rd_tile[0] = TW'(t); #1;
      check(int'(rd_cnt[0]) == lst.size(), $sformatf("tile %0d count %0d ref %0d", t, rd_cnt[0], lst.size()));
      foreach (lst[k]) begin
        automatic logic [31:0] wv = u_dram.mem[LIST_BASE + (int'(parity) << 27) + t * CAP + k];
        check(int'(wv[15:0]) == lst[k] && int'(wv[30:16]) == pkey[lst[k]] && !wv[31],
              $sformatf("tile %0d entry %0d = g%0d key %0d, ref g%0d key %0d", t, k, wv[15:0], wv[30:16], lst[k], pkey[lst[k]]));
      end
    end
    check(n_keys == rkeys && n_drop == rdrop, $sformatf("keys %0d dropped %0d, ref %0d %0d", n_keys, n_drop, rkeys, rdrop));
    check(rdrop > 0, "no key dropped");
    $display("visible=%0d keys=%0d dropped=%0d", nvis, n_keys, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
