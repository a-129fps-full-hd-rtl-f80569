// tb_mac_pe: self-checking test of one multiply-accumulate PE.
// Random dot products of random length (with a start value) are streamed in,
// some with gaps in en; the result is compared with a real-valued sum and
// must be on acc exactly 2 cycles after the last operand.
module tb_mac_pe;
  import gs_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic en, first;
  fx_t a, w, init, acc;
  mac_pe dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  initial begin #1ms; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  function automatic real rv(fx_t v); return $itor(v) / 65536.0; endfunction
  initial begin
    en = 0; first = 0; a = 0; w = 0; init = 0;
    repeat (3) @(posedge clk); rst = 0;
    for (int t = 0; t < 300; t++) begin
      int n; real sum;
      n = 1 + $urandom % 6;
      init = fx_t'($signed($urandom) >>> 12);
      sum = rv(init);
      for (int k = 0; k < n; k++) begin
        while ($urandom % 4 == 0) begin en <= 0; @(posedge clk); end
        en <= 1; first <= (k == 0);
        a <= fx_t'($signed($urandom) >>> 10); w <= fx_t'($signed($urandom) >>> 14);
        @(posedge clk);
        sum += rv(a) * rv(w);
      end
      en <= 0; first <= 0;
      @(posedge clk);                 // 1 cycle after last operand: product stage
      @(posedge clk); #1;             // 2 cycles: accumulated
      check((rv(acc) - sum) < 8.0 / 65536.0 && (sum - rv(acc)) < 8.0 / 65536.0,
            $sformatf("acc %f ref %f", rv(acc), sum));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
