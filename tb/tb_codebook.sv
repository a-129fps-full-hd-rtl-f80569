// tb_codebook: self-checking test of the SH codebook (vector dequantization).
// Loads every entry with random coefficients through the load port, then
// reads random indices back-to-back: each read must return the 12
// coefficients of that entry exactly one cycle later.
module tb_codebook;
  import gs_pkg::*;
  localparam int E = 256;
  logic clk = 0;
  always #5 clk = ~clk;
  logic ld_we, rd_en;
  logic [7:0] ld_entry, rd_idx;
  logic [3:0] ld_coef;
  fx_t ld_data;
  fx_t [11:0] rd_sh;
  codebook dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  initial begin #2ms; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  fx_t model [E][12];
  initial begin
    int prev; bit pv;
    ld_we = 0; rd_en = 0; ld_entry = 0; ld_coef = 0; ld_data = 0; rd_idx = 0;
    @(posedge clk);
    for (int e = 0; e < E; e++)
      for (int k = 0; k < 12; k++) begin
        model[e][k] = fx_t'($urandom);
        ld_we <= 1; ld_entry <= 8'(e); ld_coef <= 4'(k); ld_data <= model[e][k];
        @(posedge clk);
      end
    ld_we <= 0;
    pv = 0;
    for (int t = 0; t < 600; t++) begin
      int i; i = $urandom % E;
      rd_en <= 1; rd_idx <= 8'(i);
      @(posedge clk); #1;
      check(rd_sh == {model[i][11], model[i][10], model[i][9], model[i][8], model[i][7], model[i][6],
                      model[i][5], model[i][4], model[i][3], model[i][2], model[i][1], model[i][0]},
            $sformatf("entry %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
