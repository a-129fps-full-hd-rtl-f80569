// tb_sram_1r1w: self-checking test of the one-read one-write SRAM (Sorting
// SRAM, Feature SRAM, local key buffer). Random writes and reads against an
// array model; read data must appear exactly one cycle after re.
module tb_sram_1r1w;
  localparam int W = 36, D = 40;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we, re;
  logic [$clog2(D)-1:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  sram_1r1w #(.WIDTH(W), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  initial begin #1ms; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  logic [W-1:0] model [D];
  bit written [D];
  initial begin
    logic [W-1:0] exp_q; bit chk_q;
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0; chk_q = 0;
    @(posedge clk);
    for (int c = 0; c < 2000; c++) begin
      #1;
      if (chk_q) check(rdata == exp_q, $sformatf("read %h exp %h", rdata, exp_q));
      we = $urandom % 2; re = $urandom % 2;
      waddr = $urandom % D; raddr = $urandom % D; wdata = {$urandom, $urandom};
      if (we && re && waddr == raddr) re = 0;      // read-during-write to one address left undefined
      chk_q = re && written[raddr]; exp_q = model[raddr];
      @(posedge clk);
      if (we) begin model[waddr] = wdata; written[waddr] = 1; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
