// tb_pe_array: self-checking test of the 6x1 PE array. Each trial issues a
// random matrix-vector product: the broadcast weight w[k] multiplies column k
// on all enabled PEs; results (bypass) and their adder-tree sum are compared
// with real-valued references 2 cycles after the last issue.
module tb_pe_array;
  import gs_pkg::*;
  localparam int N = 6;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [N-1:0] en, first;
  fx_t w, out_sum;
  fx_t [N-1:0] in, init, out_vec;
  pe_array #(.NPE(N)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  initial begin #1ms; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  function automatic real rv(fx_t v); return $itor(v) / 65536.0; endfunction
  function automatic bit near(real x, real y); return (x - y) < 1e-3 && (y - x) < 1e-3; endfunction
  initial begin
    en = 0; first = 0; w = 0; in = '0; init = '0;
    repeat (3) @(posedge clk); rst = 0;
    for (int t = 0; t < 200; t++) begin
      int n; real r[N], s; logic [N-1:0] m;
      n = 1 + $urandom % 4; m = N'($urandom) | 6'b1;
      for (int i = 0; i < N; i++) begin init[i] = fx_t'($signed($urandom) >>> 14); r[i] = rv(init[i]); end
      for (int k = 0; k < n; k++) begin
        en <= m; first <= (k == 0) ? m : '0;
        w <= fx_t'($signed($urandom) >>> 14);
        for (int i = 0; i < N; i++) in[i] <= fx_t'($signed($urandom) >>> 12);
        @(posedge clk);
        for (int i = 0; i < N; i++) r[i] += rv(in[i]) * rv(w);
      end
      en <= '0; first <= '0;
      @(posedge clk); @(posedge clk); #1;
      s = 0;
      for (int i = 0; i < N; i++) if (m[i]) begin
        check(near(rv(out_vec[i]), r[i]), $sformatf("pe %0d %f ref %f", i, rv(out_vec[i]), r[i]));
      end
      for (int i = 0; i < N; i++) s += rv(out_vec[i]);
      check(near(rv(out_sum), s), $sformatf("sum %f ref %f", rv(out_sum), s));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
