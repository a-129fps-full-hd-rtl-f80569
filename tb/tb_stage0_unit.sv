// tb_stage0_unit: self-checking test of Stage 0 (View SRAM, near-plane
// culling, culling mask, Projection FIFO) against the behavioural DRAM.
// A random scene of 300 Gaussians, 25% behind the camera, is preloaded. The
// test pops the Projection FIFO with random stalls and checks: the visible
// indices come out in increasing order and match the real-valued culling
// test z + r < z_near; the culled / visible counts; every culling-mask word
// in DRAM; and done.
module tb_stage0_unit;
  import gs_pkg::*;
  import gs_ref_pkg::*;
  localparam int NGS = 300;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic start, done, busy, rreq, rgnt, rvalid, wreq, wgnt, p_valid, p_pop;
  logic [31:0] n_gauss, raddr, rdata, waddr, wdata, n_culled, n_visible;
  cam_t cam; gidx_t p_gidx;
  stage0_unit dut (.*);

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
  initial begin #5ms; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  int popped[$];
  always_ff @(posedge clk) if (p_pop && p_valid && !rst) popped.push_back(int'(p_gidx));
  assign p_pop = p_valid && ($urandom % 3 != 0);

  initial begin
    int rc, rvis; int expv[$];
    void'($urandom(11));
    gen_scene(NGS, 1920, 1080, 0.25, 0.3, 2.0, 0.3, 0.9);
    for (int i = 0; i < NGS; i++) begin
      u_dram.mem[VIEW_BASE + 4*i + 0] = fx(gx[i]); u_dram.mem[VIEW_BASE + 4*i + 1] = fx(gy[i]);
      u_dram.mem[VIEW_BASE + 4*i + 2] = fx(gz[i]); u_dram.mem[VIEW_BASE + 4*i + 3] = fx(grad[i]);
    end
    cam = '0; cam.view[0][0] = FX_ONE; cam.view[1][1] = FX_ONE; cam.view[2][2] = FX_ONE;
    cam.znear = fx(c_znear);
    n_gauss = NGS; start = 0;
    repeat (4) @(posedge clk); #1 rst = 0;
    @(posedge clk); #1 start = 1; @(posedge clk); #1 start = 0;
    while (!done) @(posedge clk);
    repeat (100) @(posedge clk);
    rc = 0; rvis = 0;
    for (int i = 0; i < NGS; i++) if ((gz[i] + grad[i]) < c_znear) rc++; else begin rvis++; expv.push_back(i); end
    check(n_culled == rc && n_visible == rvis, $sformatf("counts %0d/%0d ref %0d/%0d", n_culled, n_visible, rc, rvis));
    check(popped.size() == expv.size(), $sformatf("%0d popped, %0d visible", popped.size(), expv.size()));
    foreach (expv[k]) if (k < popped.size()) check(popped[k] == expv[k], $sformatf("entry %0d: %0d exp %0d", k, popped[k], expv[k]));
    for (int wd = 0; wd < (NGS + 31) / 32; wd++) begin
      logic [31:0] e; e = '0;
      for (int b = 0; b < 32; b++) if (wd * 32 + b < NGS) e[b] = (gz[wd*32+b] + grad[wd*32+b]) < c_znear;
      check(u_dram.mem.exists(MASK_BASE + wd) && u_dram.mem[MASK_BASE + wd] == e, $sformatf("mask word %0d", wd));
    end
    check(!busy, "busy after done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
