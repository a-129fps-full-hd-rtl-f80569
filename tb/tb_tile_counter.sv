// tb_tile_counter: self-checking test of the tile address offset controller.
// Random increments into two banks against a per-tile count model: inc_cnt is
// the slot the key goes to, inc_full rises at TILE_CAP and a full tile stops
// counting; the read ports see the other bank; clear empties one bank
// without touching the other, with busy high for exactly NTILES cycles.
module tb_tile_counter;
  localparam int NT = 50, CAP = 9, NRD = 4, CW = $clog2(CAP + 1), TW = $clog2(NT);
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic clear, clear_bank, busy, inc, inc_bank, inc_full, rd_bank;
  logic [TW-1:0] inc_tile;
  logic [CW-1:0] inc_cnt;
  logic [NRD-1:0][TW-1:0] rd_tile;
  logic [NRD-1:0][CW-1:0] rd_cnt;
  tile_counter #(.NTILES(NT), .TILE_CAP(CAP), .NRD(NRD)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  initial begin #2ms; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  int m [2][NT];
  int n_full = 0;
  initial begin
    clear = 0; clear_bank = 0; inc = 0; inc_bank = 0; inc_tile = '0; rd_bank = 0; rd_tile = '0;
    repeat (3) @(posedge clk); rst = 0;
    while (busy) @(posedge clk);          // reset sweep of both banks
    #1;
    for (int c = 0; c < 5000; c++) begin
      int b, t;
      if (c % 1000 == 999) begin
        b = $urandom % 2;
        begin
          automatic int nb = 0;
          clear = 1; clear_bank = b; inc = 0; @(posedge clk); #1; clear = 0;
          while (busy) begin
            nb++;
            rd_bank = !b; for (int r = 0; r < NRD; r++) rd_tile[r] = TW'($urandom % NT);
            #1; for (int r = 0; r < NRD; r++) check(rd_cnt[r] == CW'(m[!b][rd_tile[r]]), "other bank during clear");
            @(posedge clk); #1;
          end
          check(nb == NT, $sformatf("clear took %0d cycles", nb));
          for (int i = 0; i < NT; i++) m[b][i] = 0;
        end
      end
      b = $urandom % 2; t = $urandom % NT;
      inc = $urandom % 4 != 0; inc_bank = b; inc_tile = TW'(t);
      rd_bank = $urandom % 2;
      for (int r = 0; r < NRD; r++) rd_tile[r] = TW'($urandom % NT);
      #1;
      check(inc_cnt == CW'(m[b][t]), $sformatf("inc_cnt %0d model %0d", inc_cnt, m[b][t]));
      check(inc_full == (m[b][t] == CAP), "inc_full");
      for (int r = 0; r < NRD; r++) check(rd_cnt[r] == CW'(m[rd_bank][rd_tile[r]]), "read port");
      if (inc_full) n_full++;
      @(posedge clk); #1;
      if (inc && m[b][t] < CAP) m[b][t]++;
    end
    check(n_full > 50, "capacity limit exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
