// tb_near_plane_cull: self-checking test of the near-plane culling unit.
// Random view rows and Gaussian centres; the depth z = row . [p, 1] and the
// decision z + dz < z_near are computed in real arithmetic. Checks the
// decision, the depth, the index, the 4-cycle latency from acceptance to
// out_valid given by the reference, and one point per 4 cycles throughput.
module tb_near_plane_cull;
  import gs_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  fx_t [3:0] row; fx_t znear, in_dz, out_z;
  fx_t [2:0] in_pos;
  logic in_valid, in_ready, out_ready, out_valid, out_cull;
  gidx_t in_gidx, out_gidx;
  near_plane_cull dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  initial begin #1ms; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  function automatic real rv(fx_t v); return $itor(v) / 65536.0; endfunction
  int n_cull = 0, n_keep = 0;
  initial begin
    int t_acc, t_prev;
    in_valid = 0; out_ready = 1; t_prev = -100;
    znear = 32'sd13107;   // 0.2
    repeat (3) @(posedge clk); rst = 0;
    for (int t = 0; t < 400; t++) begin
      real z, zr; bit cull;
      for (int i = 0; i < 3; i++) row[i] = fx_t'($signed($urandom) >>> 15);     // about +-1
      row[3] = fx_t'($signed($urandom) >>> 13);                                   // about +-4
      for (int i = 0; i < 3; i++) in_pos[i] = fx_t'($signed($urandom) >>> 13);
      in_dz = fx_t'($urandom % (2 << 16));
      in_gidx = gidx_t'(t);
      zr = rv(row[3]); for (int i = 0; i < 3; i++) zr += rv(row[i]) * rv(in_pos[i]);
      cull = (zr + rv(in_dz)) < rv(znear);
      in_valid = 1;
      #1;
      while (!in_ready) begin @(posedge clk); #1; end
      @(posedge clk);                  // accepted at this edge
      t_acc = $time / 10;
      #1;
      if (t > 0) check(t_acc - t_prev == 4, $sformatf("throughput: %0d cycles between points", t_acc - t_prev));
      t_prev = t_acc;
      in_valid = 0;
      for (int k = 1; k < 4; k++) begin check(!out_valid, "out_valid too early"); @(posedge clk); #1; end
      // out_valid is seen during cycle LATENCY after acceptance

      check(out_valid, "no out_valid 4 cycles after acceptance");
      if ((zr + rv(in_dz) - rv(znear)) > 1e-3 || (zr + rv(in_dz) - rv(znear)) < -1e-3)
        check(out_cull == cull, $sformatf("cull %0d ref %0d z %f", out_cull, cull, zr));
      check((rv(out_z) - zr) < 1e-3 && (zr - rv(out_z)) < 1e-3, $sformatf("z %f ref %f", rv(out_z), zr));
      check(out_gidx == gidx_t'(t), "index");
      if (out_cull) n_cull++; else n_keep++;
    end
    check(n_cull > 20 && n_keep > 20, "both decisions exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
