// tile_counter: per-tile address offset controller for the key/value lists.
//
// Every tile owns a fixed-size region of TILE_CAP entries for the keys of the
// Gaussians that touch it (the reference: "each 16x16 tile is assigned to an
// independent SRAM bank with a fixed entry depth and address offset
// controller"). This block keeps, for each tile, the number of entries
// written so far; the next key of tile t goes to t*TILE_CAP + count[t].
// There are two banks so that preprocessing can fill the lists of the next
// frame while rendering reads the counts of the current one.
// clear resets one bank by sweeping it, one tile per cycle (NTILES cycles,
// a small fraction of the preprocessing time of a frame); busy is high
// meanwhile and no increment may be issued. After reset both banks are swept.
// The count memories therefore need only one write port each, and no
// per-tile flip-flop is spent on a one-cycle clear.
//
// Interface: inc (tile inc_tile, bank inc_bank) returns the old count on
// inc_cnt combinationally and increments it at the clock edge unless the tile
// is full (inc_full = 1, the key is dropped by the caller). NRD read ports
// give counts for the render lanes (combinational).
module tile_counter #(
  parameter int NTILES   = 8160,
  parameter int TILE_CAP = 8000,
  parameter int NRD      = 4,
  localparam int TW = $clog2(NTILES),
  localparam int CW = $clog2(TILE_CAP + 1)
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    clear,
  input  logic                    clear_bank,
  output logic                    busy,
  input  logic                    inc,
  input  logic                    inc_bank,
  input  logic [TW-1:0]           inc_tile,
  output logic [CW-1:0]           inc_cnt,
  output logic                    inc_full,
  input  logic                    rd_bank,
  input  logic [NRD-1:0][TW-1:0]  rd_tile,
  output logic [NRD-1:0][CW-1:0]  rd_cnt
);
  logic [CW-1:0] cnt0 [NTILES];
  logic [CW-1:0] cnt1 [NTILES];
  logic [1:0]    sweep;          // banks being cleared
  logic [TW-1:0] ptr;

  assign busy = (sweep != 2'b00);
  assign inc_cnt  = inc_bank ? cnt1[inc_tile] : cnt0[inc_tile];
  assign inc_full = (inc_cnt == CW'(TILE_CAP));

  always_comb
    for (int r = 0; r < NRD; r++)
      rd_cnt[r] = rd_bank ? cnt1[rd_tile[r]] : cnt0[rd_tile[r]];

  always_ff @(posedge clk) begin
    if (rst) begin
      sweep <= 2'b11; ptr <= '0;
    end else if (clear) begin
      sweep <= clear_bank ? 2'b10 : 2'b01; ptr <= '0;
    end else if (busy) begin
      if (ptr == TW'(NTILES - 1)) sweep <= 2'b00;
      else ptr <= ptr + 1'b1;
    end
  end

  always_ff @(posedge clk)
    if (busy && sweep[0])                    cnt0[ptr] <= '0;
    else if (inc && !inc_full && !inc_bank)  cnt0[inc_tile] <= inc_cnt + 1'b1;

  always_ff @(posedge clk)
    if (busy && sweep[1])                    cnt1[ptr] <= '0;
    else if (inc && !inc_full && inc_bank)   cnt1[inc_tile] <= inc_cnt + 1'b1;

  a_no_inc_while_busy: assert property (@(posedge clk) disable iff (rst) !(busy && inc));
endmodule
