// tb_sync_fifo: self-checking test of the synchronous FIFO (View SRAM,
// Projection FIFO and Preprocess SRAM all use it).
// Random pushes and pops against a queue model; checks data order, count,
// full/empty flags, and that a push into a full FIFO / pop from an empty FIFO
// is never issued by the test (the design asserts on them).
module tb_sync_fifo;
  localparam int W = 20, D = 12;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic push, pop, full, empty;
  logic [W-1:0] wdata, rdata;
  logic [$clog2(D+1)-1:0] count;
  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  initial begin #1ms; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  logic [W-1:0] model[$];
  int n_full = 0;
  initial begin
    push = 0; pop = 0; wdata = '0;
    repeat (3) @(posedge clk); rst = 0; @(posedge clk);
    for (int c = 0; c < 3000; c++) begin
      bit dp, dq;
      // phases: filling, draining, mixed
      dp = ((c / 500) % 3 == 0) ? ($urandom % 4 != 0) : ((c / 500) % 3 == 1) ? ($urandom % 4 == 0) : $urandom % 2;
      dq = ((c / 500) % 3 == 0) ? ($urandom % 4 == 0) : ((c / 500) % 3 == 1) ? ($urandom % 4 != 0) : $urandom % 2;
      #1;
      check(count == model.size(), $sformatf("count %0d model %0d", count, model.size()));
      check(full == (model.size() == D), "full flag");
      check(empty == (model.size() == 0), "empty flag");
      if (model.size() > 0) check(rdata == model[0], $sformatf("head %h model %h", rdata, model[0]));
      if (full) n_full++;
      push = dp && !full; pop = dq && !empty; wdata = W'($urandom);
      @(posedge clk);
      if (pop) void'(model.pop_front());
      if (push) model.push_back(wdata);
    end
    push = 0; pop = 0;
    check(n_full > 0, "FIFO never reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
