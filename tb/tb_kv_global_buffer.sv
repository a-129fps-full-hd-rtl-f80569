// tb_kv_global_buffer: self-checking test of the shared key/value global
// buffer. Four lanes randomly request the buffer; checks that at most one
// lane owns it, that ownership is handed round-robin to waiting lanes, that
// the owner's writes are read back (one-cycle read latency) and that a
// non-owner's writes never reach the memory.
module tb_kv_global_buffer;
  localparam int NL = 4, D = 64, AW = 6;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [NL-1:0] acq, gnt, we, re;
  logic [NL-1:0][AW-1:0] waddr, raddr;
  logic [NL-1:0][31:0] wdata;
  logic [31:0] rdata;
  kv_global_buffer #(.NLANE(NL), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  initial begin #2ms; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  logic [31:0] model [D];
  bit written [D];
  int owners[$];
  int n_grants = 0;

  initial begin
    acq = '0; we = '0; re = '0; waddr = '0; raddr = '0; wdata = '0;
    repeat (3) @(posedge clk); rst = 0;
    for (int s = 0; s < 60; s++) begin
      int o; int nb;
      // all lanes want it; lanes 0..3 queue
      acq = 4'b1111;
      @(posedge clk); #1;
      while (gnt == 0) begin @(posedge clk); #1; end
      check($countones(gnt) == 1, "one owner");
      o = $clog2(gnt);
      owners.push_back(o);
      // other lanes try to write garbage
      nb = 4 + $urandom % 8;
      for (int k = 0; k < nb; k++) begin
        we = '1; re = '0;
        for (int l = 0; l < NL; l++) begin waddr[l] = AW'($urandom % D); wdata[l] = $urandom; end
        model[waddr[o]] = wdata[o]; written[waddr[o]] = 1;
        @(posedge clk); #1;
      end
      we = '0;
      for (int k = 0; k < 8; k++) begin
        int a; a = $urandom % D;
        while (!written[a]) a = (a + 1) % D;
        re = '0; re[o] = 1; raddr[o] = AW'(a);
        for (int l = 0; l < NL; l++) if (l != o) begin re[l] = 1; raddr[l] = AW'($urandom % D); end
        @(posedge clk); #1;
        check(rdata == model[a], $sformatf("owner %0d read %0d", o, a));
      end
      re = '0;
      acq[o] = 0; @(posedge clk); #1;
      n_grants++;
      acq = '0; @(posedge clk); #1;
    end
    for (int i = 1; i < owners.size(); i++)
      check(owners[i] == (owners[i-1] + 1) % NL, $sformatf("round robin %0d -> %0d", owners[i-1], owners[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
