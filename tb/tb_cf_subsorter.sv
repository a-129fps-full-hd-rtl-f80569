// tb_cf_subsorter: self-checking test of the comparison-free sub-sorter.
// Loads random key sets (with many duplicate keys and partial fills), then
// drains the sorter. Checks against a reference sort: keys leave largest
// first, equal keys leave lowest slot first, every loaded slot leaves exactly
// once, and with o_ready held high one element leaves every 2 cycles (the
// reference's rate). Random o_ready back-pressure must not lose or repeat
// elements; clear in the middle of a drain must empty the sorter.
module tb_cf_subsorter;
  localparam int N = 64, KW = 15, SW = 6;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic clear, ld_valid, go, o_valid, o_ready, empty;
  logic [SW-1:0] ld_slot, o_slot;
  logic [KW-1:0] ld_key, o_key;
  cf_subsorter #(.N(N), .KW(KW)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  initial begin #5ms; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  initial begin
    clear = 0; ld_valid = 0; go = 0; o_ready = 0; ld_slot = '0; ld_key = '0;
    repeat (3) @(posedge clk); rst = 0; @(posedge clk);
    for (int t = 0; t < 60; t++) begin
      automatic int n, keys[N], order[$], got, first_t, last_t; automatic bit bp, abort;
      n = 1 + $urandom % N;
      bp = (t % 3 == 2); abort = (t % 10 == 9);
      clear <= 1; @(posedge clk); clear <= 0;
      for (int i = 0; i < n; i++) begin
        keys[i] = (t % 2) ? ($urandom % 8) : ($urandom % (1 << KW));   // duplicates on odd trials
        ld_valid <= 1; ld_slot <= SW'(i); ld_key <= KW'(keys[i]);
        @(posedge clk);
      end
      ld_valid <= 0;
      // reference order: largest key, then lowest slot
      begin
        automatic bit used[N] = '{default: 0};
        for (int r = 0; r < n; r++) begin
          int b; b = -1;
          for (int j = 0; j < n; j++) if (!used[j] && (b < 0 || keys[j] > keys[b])) b = j;
          used[b] = 1; order.push_back(b);
        end
      end
      go <= 1; o_ready <= 1;
      got = 0; first_t = -1; last_t = 0;
      for (int c = 0; c < 8 * N && got < n; c++) begin
        #1;
        o_ready = bp ? 1'($urandom % 2) : 1'b1;
        if (o_valid && o_ready) begin
          check(o_slot == SW'(order[got]) && o_key == KW'(keys[order[got]]),
                $sformatf("trial %0d out %0d slot %0d key %0d exp slot %0d key %0d", t, got, o_slot, o_key, order[got], keys[order[got]]));
          if (first_t < 0) first_t = c;
          last_t = c;
          got++;
          if (abort && got == n / 2 && n > 4) begin
            @(posedge clk); #1; clear = 1; o_ready = 0; @(posedge clk); #1; clear = 0;
            @(posedge clk); #1;
            check(empty && !o_valid, "clear did not empty the sorter");
            break;
          end
        end
        @(posedge clk);
      end
      if (!(abort && n > 4)) begin
        check(got == n, $sformatf("trial %0d: %0d of %0d out", t, got, n));
        if (!bp && n > 1) check(last_t - first_t == 2 * (n - 1), $sformatf("rate: %0d elements in %0d cycles", n, last_t - first_t));
        @(posedge clk); #1;
        check(empty, "not empty after drain");
      end
      go <= 0; o_ready <= 0;
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
