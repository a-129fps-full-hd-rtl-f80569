// tile_duplicate: the Duplicate step at the end of Stage 1.
//
// A projected Gaussian covers the screen box [u-rx, u+rx] x [v-ry, v+ry].
// For every 16x16 tile that box touches (clipped to the image), this unit
// emits one key/value pair: the tile number (row-major, TX tiles per row), the
// 15-bit depth key and the Gaussian index as value. The reference names the
// Duplicate step and the <tile-id, depth> key; the scan order (row by row)
// and the key encoding (inverted Q8.7 depth, so that a largest-first sorter
// yields nearest-first order) are this design's.
//
// Interface: start with the Gaussian's box, depth, index and ok (0: emit
// nothing). Pairs come out on e_valid/e_ready, one per cycle when e_ready is
// high. done pulses after the last pair (or at once when nothing is covered);
// n_emit gives how many pairs this Gaussian produced.
module tile_duplicate
  import gs_pkg::*;
#(
  parameter int IMG_W = 1920,
  parameter int IMG_H = 1080,
  parameter int TILE  = 16,
  localparam int TX = (IMG_W + TILE - 1) / TILE,
  localparam int TY = (IMG_H + TILE - 1) / TILE,
  localparam int TW = $clog2(TX * TY)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  input  fx_t           u,
  input  fx_t           v,
  input  fx_t           rx,
  input  fx_t           ry,
  input  fx_t           depth,
  input  gidx_t         gidx,
  input  logic          ok,
  output logic          e_valid,
  input  logic          e_ready,
  output logic [TW-1:0] e_tile,
  output key_t          e_key,
  output gidx_t         e_val,
  output logic          done,
  output logic [15:0]   n_emit
);
  localparam int LT = $clog2(TILE);

  // tile range, computed combinationally from the start inputs
  fx_t xmin, xmax, ymin, ymax;
  logic signed [15:0] ix0, ix1, iy0, iy1;
  logic empty;
  always_comb begin
    xmin = fx_add(u, -rx); xmax = fx_add(u, rx);
    ymin = fx_add(v, -ry); ymax = fx_add(v, ry);
    ix0 = $signed(xmin[31:16]) >>> LT; ix1 = $signed(xmax[31:16]) >>> LT;
    iy0 = $signed(ymin[31:16]) >>> LT; iy1 = $signed(ymax[31:16]) >>> LT;
    empty = !ok || (ix1 < 0) || (iy1 < 0) || (ix0 >= 16'(TX)) || (iy0 >= 16'(TY));
    if (ix0 < 0) ix0 = '0;
    if (iy0 < 0) iy0 = '0;
    if (ix1 >= 16'(TX)) ix1 = 16'(TX - 1);
    if (iy1 >= 16'(TY)) iy1 = 16'(TY - 1);
  end

  logic        run;
  logic [15:0] cx, cy, x0, x1, y1;
  key_t        key_q;
  gidx_t       val_q;

  assign e_valid = run;
  assign e_tile  = TW'(32'(cy) * TX + 32'(cx));
  assign e_key   = key_q;
  assign e_val   = val_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      run <= 1'b0; done <= 1'b0; n_emit <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        n_emit <= '0;
        key_q  <= depth_key(depth);
        val_q  <= gidx;
        if (empty) begin
          done <= 1'b1;
        end else begin
          run <= 1'b1;
          x0 <= ix0; x1 <= ix1; y1 <= iy1;
          cx <= ix0; cy <= iy0;
        end
      end else if (run && e_ready) begin
        n_emit <= n_emit + 1'b1;
        if (cx == x1) begin
          cx <= x0;
          if (cy == y1) begin run <= 1'b0; done <= 1'b1; end
          else cy <= cy + 1'b1;
        end else begin
          cx <= cx + 1'b1;
        end
      end
    end
  end
endmodule
