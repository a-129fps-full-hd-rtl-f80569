// tb_tile_duplicate: self-checking test of the Duplicate unit.
// Random screen boxes (partly or fully off-screen, some not ok) on a
// 100x70 image of 16x16 tiles; the expected tile set is computed from the
// real-valued box. Checks the tiles (row-major order, each once), the key
// (inverted Q8.7 depth), the value, n_emit, and one pair per cycle while
// e_ready is high, with random back-pressure on other trials.
module tb_tile_duplicate;
  import gs_pkg::*;
  localparam int W = 100, H = 70, T = 16, TX = 7, TY = 5, TW = $clog2(TX * TY);
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic start, ok, e_valid, e_ready, done;
  fx_t u, v, rx, ry, depth;
  gidx_t gidx, e_val;
  logic [TW-1:0] e_tile;
  key_t e_key;
  logic [15:0] n_emit;
  tile_duplicate #(.IMG_W(W), .IMG_H(H), .TILE(T)) dut (.*);

  function automatic int irand(int n);
    int r;
    r = int'($urandom % n);
    return r;
  endfunction
  int checks = 0, failures = 0;
  task automatic check(bit ok_, string what);
    checks++; if (!ok_) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  initial begin #5ms; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  function automatic int flr(real x); return int'($floor(x)); endfunction
  initial begin
    start = 0; ok = 0; e_ready = 0; u = 0; v = 0; rx = 0; ry = 0; depth = 0; gidx = 0;
    repeat (3) @(posedge clk); rst = 0;
    for (int t = 0; t < 300; t++) begin
      automatic int exp_t[$];
      automatic real ur, vr, rxr, ryr, dr;
      automatic int x0, x1, y0, y1, got, cyc, kexp;
      automatic bit bp;
      ur = (irand(16000) - 3000) / 100.0; vr = (irand(12000) - 2500) / 100.0;
      rxr = ($urandom % 4000) / 100.0; ryr = ($urandom % 4000) / 100.0;
      dr = ($urandom % 30000) / 100.0;    // up to 300, beyond the 256 key range
      bp = t % 2;
      u = fx_t'(int'(ur * 256) * 256); v = fx_t'(int'(vr * 256) * 256);
      rx = fx_t'(int'(rxr * 256) * 256); ry = fx_t'(int'(ryr * 256) * 256);
      depth = fx_t'(int'(dr * 256) * 256); gidx = gidx_t'($urandom); ok = ($urandom % 10 != 0);
      ur = $itor(u) / 65536.0; vr = $itor(v) / 65536.0; rxr = $itor(rx) / 65536.0; ryr = $itor(ry) / 65536.0;
      x0 = flr((ur - rxr) / T); x1 = flr((ur + rxr) / T); y0 = flr((vr - ryr) / T); y1 = flr((vr + ryr) / T);
      if (ok && !(x1 < 0 || y1 < 0 || x0 >= TX || y0 >= TY)) begin
        if (x0 < 0) x0 = 0;
        if (y0 < 0) y0 = 0;
        if (x1 >= TX) x1 = TX - 1;
        if (y1 >= TY) y1 = TY - 1;
        for (int y = y0; y <= y1; y++) for (int x = x0; x <= x1; x++) exp_t.push_back(y * TX + x);
      end
      kexp = ($itor(depth) / 65536.0 >= 256.0) ? 0 : 32767 - int'($floor($itor(depth) / 512.0));
      start = 1; @(posedge clk); #1; start = 0;
      got = 0; cyc = 0;
      while (!done) begin
        e_ready = bp ? 1'($urandom % 2) : 1'b1;
        if (e_valid && e_ready) begin
          check(got < exp_t.size(), "too many pairs");
          if (got < exp_t.size()) check(int'(e_tile) == exp_t[got], $sformatf("tile %0d exp %0d", e_tile, exp_t[got]));
          check(int'(e_key) == kexp, $sformatf("key %0d exp %0d (depth %f)", e_key, kexp, dr));
          check(e_val == gidx, "value");
          got++;
        end
        @(posedge clk); #1; cyc++;
        if (cyc > 1000) break;
      end
      e_ready = 0;
      check(got == exp_t.size(), $sformatf("trial %0d: %0d pairs, expected %0d", t, got, exp_t.size()));
      check(int'(n_emit) == exp_t.size(), "n_emit");
      if (!bp && exp_t.size() > 0) check(cyc == exp_t.size(), $sformatf("%0d pairs took %0d cycles", exp_t.size(), cyc));
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
