// tb_mem_ctrl: self-checking test of the round-robin memory controller.
// Eight clients issue random reads and writes to private address ranges
// against the behavioural DRAM. Checks: every read returns the value the
// client last wrote (or the preloaded value), returns arrive in request order
// per client, at most one grant per cycle, no client waits longer than
// NCLI grants (round-robin fairness) while the outstanding limit allows.
module tb_mem_ctrl;
  localparam int NC = 8, MO = 16;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [NC-1:0] cli_req, cli_we, cli_gnt, cli_rvalid;
  logic [NC-1:0][31:0] cli_addr, cli_wdata;
  logic [31:0] cli_rdata;
  logic mem_req, mem_we, mem_rvalid;
  logic [31:0] mem_addr, mem_wdata, mem_rdata;
  mem_ctrl #(.NCLI(NC), .MAXOUT(MO)) dut (.*);
  dram_model #(.LAT(7)) u_dram (.clk, .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_rvalid, .mem_rdata);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  initial begin #2ms; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  logic [31:0] shadow [NC][16];
  logic [31:0] expq [NC][$];
  int wait_c [NC];
  int n_reads = 0, n_writes = 0, max_wait = 0;

  // clients
  always_ff @(posedge clk) begin
    if (rst) begin
      cli_req <= '0;
    end else begin
      for (int c = 0; c < NC; c++) begin
        if (cli_req[c] && cli_gnt[c]) begin
          if (cli_we[c]) begin shadow[c][cli_addr[c][3:0]] = cli_wdata[c]; n_writes++; end
          else begin expq[c].push_back(shadow[c][cli_addr[c][3:0]]); n_reads++; end
        end
        if (!cli_req[c] || cli_gnt[c]) begin
          cli_req[c]   <= ($urandom % 3 != 0);
          cli_we[c]    <= $urandom % 2;
          cli_addr[c]  <= 32'h100 * c + ($urandom % 16);
          cli_wdata[c] <= $urandom;
        end
        if (cli_rvalid[c]) begin
          check(expq[c].size() > 0, "unexpected return");
          if (expq[c].size() > 0)
            check(cli_rdata == expq[c].pop_front(), $sformatf("client %0d wrong read data", c));
        end
        wait_c[c] = (cli_req[c] && !cli_gnt[c]) ? wait_c[c] + 1 : 0;
        if (wait_c[c] > max_wait) max_wait = wait_c[c];
      end
      check($countones(cli_gnt) <= 1, "several grants in one cycle");
      check($countones(cli_rvalid) <= 1, "several returns in one cycle");
    end
  end

  initial begin
    for (int c = 0; c < NC; c++)
      for (int a = 0; a < 16; a++) begin
        shadow[c][a] = $urandom; u_dram.mem[32'h100 * c + a] = shadow[c][a];
      end
    repeat (3) @(posedge clk); rst = 0;
    repeat (4000) @(posedge clk);
    force cli_req = '0;
    repeat (40) @(posedge clk);
    for (int c = 0; c < NC; c++) check(expq[c].size() == 0, $sformatf("client %0d missing returns", c));
    check(n_reads > 1000 && n_writes > 1000, "too little traffic");
    // with 8 clients and DRAM latency 7 the outstanding limit of 16 is never
    // the bottleneck, so nobody waits more than 7 other grants
    check(max_wait <= NC, $sformatf("max wait %0d cycles", max_wait));
    $display("reads=%0d writes=%0d max_wait=%0d", n_reads, n_writes, max_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
