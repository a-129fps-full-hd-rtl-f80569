// rasterizer: Stage 3 alpha blending of one 16x16 tile.
//
// The tile's Gaussians arrive one at a time, nearest first. For each one the
// unit sweeps the tile, PIX_PAR pixels per cycle, through three steps per
// pixel (the reference's rasterization datapath):
//   alpha pruning      d = pimg - pix,
//                      power = -0.5 (a dx^2 + c dy^2) - b dx dy,
//                      alpha = min(0.99, opacity * exp(power));
//                      a Gaussian with power > 0 or alpha < 1/255 is skipped;
//   early termination  w = alpha * T, T' = T - w; if T' < tau the pixel is
//                      finished and ignores all later Gaussians;
//   colour accumulate  C += w * c for R, G, B, and T = T'.
// tau = 1e-4, the 0.99 clamp and the power > 0 test follow reference 3DGS;
// PIX_PAR (pixels per cycle) is this design's choice. The conic a, b, c
// arrives scaled by 2^CONIC_SH (see gs_pkg); the quadratic form is computed
// on the scaled values, products ordered (a dx) dx to stay in range, and
// shifted back before the exponent.
// When every pixel of the tile has finished, all_done rises so the lane can
// stop feeding (and sorting) the rest of the tile.
//
// Interface: init clears the tile (C = 0, T = 1) and sets its pixel origin.
// g_valid/g_ready hand over one Gaussian; it takes 256/PIX_PAR cycles.
// out_start streams the tile: o_valid for 256/PIX_PAR cycles, o_grp = pixel
// group, o_rgb = PIX_PAR pixels of 8-bit R, G, B (pixel k of group p is
// (p*PIX_PAR + k) mod 16, (p*PIX_PAR + k) / 16 within the tile).
// Statistics count pruned pixel evaluations and finished pixels.
module rasterizer
  import gs_pkg::*;
#(
  parameter int TILE    = 16,
  parameter int PIX_PAR = 16,
  localparam int NPIX = TILE * TILE,
  localparam int NG   = NPIX / PIX_PAR,
  localparam int GWD  = (NG > 1) ? $clog2(NG) : 1
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       init,
  input  logic [15:0]                org_x,
  input  logic [15:0]                org_y,
  input  logic                       g_valid,
  output logic                       g_ready,
  input  feat_t                      g_feat,
  output logic                       all_done,
  input  logic                       out_start,
  output logic                       o_valid,
  output logic [GWD-1:0]             o_grp,
  output logic [PIX_PAR-1:0][23:0]   o_rgb,
  output logic                       o_last,
  output logic [31:0]                n_pruned,
  output logic [31:0]                n_term
);
  localparam fx_t ALPHA_MIN = 32'sd257;    // 1/255
  localparam fx_t ALPHA_MAX = 32'sd64881;  // 0.99
  localparam fx_t TAU       = 32'sd7;      // 1e-4

  fx_t        cr [NPIX];
  fx_t        cg [NPIX];
  fx_t        cbl[NPIX];
  fx_t        tt [NPIX];
  logic [NPIX-1:0] fin;
  feat_t      f;
  logic       busy, outing;
  logic [GWD-1:0] grp, ogrp;
  logic [15:0] ox, oy;

  assign g_ready  = !busy && !outing;
  assign all_done = &fin;

  // per-pixel datapath for the current group
  fx_t  [PIX_PAR-1:0] n_r, n_g, n_b, n_t;
  logic [PIX_PAR-1:0] n_fin, pruned, term;

  always_comb begin
    for (int k = 0; k < PIX_PAR; k++) begin
      int   idx;
      fx_t  px, py, dx, dy, power, alpha, wgt, t_new;
      idx = int'(grp) * PIX_PAR + k;
      px  = fx_t'({ox + 16'(idx % TILE), 16'h0});
      py  = fx_t'({oy + 16'(idx / TILE), 16'h0});
      dx  = fx_add(f.u, -px);
      dy  = fx_add(f.v, -py);
      // (a dx) dx rather than a (dx dx): keeps the products inside Q16.16 range
      // the conic arrives scaled by 2^CONIC_SH; the scale is shifted out here
      power = fx_add(fx_mul(-FX_HALF, fx_add(fx_mul(fx_mul(f.ca, dx), dx), fx_mul(fx_mul(f.cc, dy), dy))),
                     -fx_mul(fx_mul(f.cb, dx), dy)) >>> CONIC_SH;
      alpha = fx_mul(f.opacity, fx_exp(power));
      if (alpha > ALPHA_MAX) alpha = ALPHA_MAX;
      wgt   = fx_mul(alpha, tt[idx]);
      t_new = fx_add(tt[idx], -wgt);
      n_r[k] = cr[idx]; n_g[k] = cg[idx]; n_b[k] = cbl[idx]; n_t[k] = tt[idx];
      n_fin[k] = fin[idx];
      pruned[k] = 1'b0; term[k] = 1'b0;
      if (!fin[idx]) begin
        if (power > 0 || alpha < ALPHA_MIN) begin
          pruned[k] = 1'b1;
        end else if (t_new < TAU) begin
          n_fin[k] = 1'b1; term[k] = 1'b1;
        end else begin
          n_r[k] = fx_add(cr[idx],  fx_mul(wgt, f.r));
          n_g[k] = fx_add(cg[idx],  fx_mul(wgt, f.g));
          n_b[k] = fx_add(cbl[idx], fx_mul(wgt, f.b));
          n_t[k] = t_new;
        end
      end
    end
  end

  function automatic logic [7:0] to8(input fx_t c);
    fx_t s;
    if (c <= 0) return 8'd0;
    s = fx_mul(c, 32'sd16711680);       // * 255
    if (s >= 32'sd16711680) return 8'd255;
    return s[23:16];
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0; outing <= 1'b0; grp <= '0; ogrp <= '0; fin <= '0;
      n_pruned <= '0; n_term <= '0; ox <= '0; oy <= '0;
    end else begin
      if (init) begin
        fin <= '0; ox <= org_x; oy <= org_y; busy <= 1'b0; outing <= 1'b0;
        for (int i = 0; i < NPIX; i++) begin
          cr[i] <= '0; cg[i] <= '0; cbl[i] <= '0; tt[i] <= FX_ONE;
        end
      end else if (g_valid && g_ready) begin
        f <= g_feat; busy <= 1'b1; grp <= '0;
      end else if (busy) begin
        for (int k = 0; k < PIX_PAR; k++) begin
          cr[int'(grp)*PIX_PAR+k]  <= n_r[k];
          cg[int'(grp)*PIX_PAR+k]  <= n_g[k];
          cbl[int'(grp)*PIX_PAR+k] <= n_b[k];
          tt[int'(grp)*PIX_PAR+k]  <= n_t[k];
          fin[int'(grp)*PIX_PAR+k] <= n_fin[k];
        end
        n_pruned <= n_pruned + 32'($countones(pruned));
        n_term   <= n_term + 32'($countones(term));
        if (grp == GWD'(NG - 1)) busy <= 1'b0;
        else grp <= grp + 1'b1;
      end else if (out_start && !outing) begin
        outing <= 1'b1; ogrp <= '0;
      end else if (outing) begin
        if (ogrp == GWD'(NG - 1)) outing <= 1'b0;
        else ogrp <= ogrp + 1'b1;
      end
    end
  end

  assign o_valid = outing;
  assign o_grp   = ogrp;
  assign o_last  = outing && (ogrp == GWD'(NG - 1));
  always_comb
    for (int k = 0; k < PIX_PAR; k++) begin
      int idx;
      idx = int'(ogrp) * PIX_PAR + k;
      o_rgb[k] = {to8(cr[idx]), to8(cg[idx]), to8(cbl[idx])};
    end
endmodule
