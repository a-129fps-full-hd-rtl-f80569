// tb_cull_mask: self-checking test of the culling-mask buffer.
// A random decision per Gaussian (N not a multiple of 32) is fed one bit per
// 4 cycles, waiting while busy; grants are delayed randomly. The words
// written to memory are compared with the expected packing (bit g%32 of word
// MASK_BASE + g/32), including the partial last word written by flush.
module tb_cull_mask;
  import gs_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic clear, bit_valid, bit_val, flush, busy, done, mreq, mgnt;
  gidx_t bit_gidx;
  logic [31:0] maddr, mwdata;
  cull_mask dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  initial begin #2ms; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  logic [31:0] got [int];
  always_ff @(posedge clk) begin
    mgnt <= mreq && ($urandom % 3 == 0) && !mgnt;
    if (mreq && mgnt) got[maddr] = mwdata;
  end

  initial begin
    localparam int N = 1000;
    bit dec [N];
    clear = 0; bit_valid = 0; bit_val = 0; bit_gidx = '0; flush = 0;
    repeat (3) @(posedge clk); rst = 0;
    for (int r = 0; r < 2; r++) begin
      got.delete();
      @(posedge clk); clear <= 1; @(posedge clk); clear <= 0;
      for (int g = 0; g < N; g++) begin
        dec[g] = ($urandom % 5 == 0);
        while (busy) @(posedge clk);
        bit_valid <= 1; bit_val <= dec[g]; bit_gidx <= gidx_t'(g);
        @(posedge clk); bit_valid <= 0;
        repeat (3) @(posedge clk);
      end
      while (busy) @(posedge clk);
      flush <= 1; @(posedge clk); flush <= 0;
      while (!done) @(posedge clk);
      for (int wd = 0; wd < (N + 31) / 32; wd++) begin
        logic [31:0] e; e = '0;
        for (int b = 0; b < 32; b++) if (wd * 32 + b < N) e[b] = dec[wd * 32 + b];
        check(got.exists(MASK_BASE + wd), $sformatf("word %0d not written", wd));
        if (got.exists(MASK_BASE + wd))
          check(got[MASK_BASE + wd] == e, $sformatf("word %0d = %h exp %h", wd, got[MASK_BASE + wd], e));
      end
      check(got.size() == (N + 31) / 32, $sformatf("%0d words written", got.size()));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
