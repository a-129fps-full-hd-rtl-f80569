// gs_pkg: types, constants and fixed-point arithmetic shared by the 3D Gaussian
// Splatting accelerator.
//
// All datapath values are signed 32-bit fixed point with 16 fraction bits
// (Q16.16, type fx_t). The reference accelerator computes in FP16; this design
// uses fixed point throughout, which keeps every operator exact and easy to
// model in a testbench. Multiplication keeps the middle 32 bits of the 64-bit
// product (truncation toward minus infinity). Division and square root are
// plain combinational functions used by the scalar helpers of Stage 1.
// The exponential used by the rasterizer evaluates 2^(x*log2 e) with a
// quadratic polynomial for the fractional power of two.
//
// The sort key is 15 bits (the sign bit of the 16-bit depth is dropped, since
// culled-in Gaussians have non-negative depth). Values (Gaussian indices) are
// 16 bits wide, the width that a 4 KB value buffer of 2000 entries holds.
package gs_pkg;

  localparam int FXW  = 32;
  localparam int FRAC = 16;
  // The conic of a large footprint is small (1/c00 for c00 up to 32767 px^2);
  // it is kept scaled by 2^CONIC_SH so that Q16.16 still holds it to about
  // 0.2 %. The rasterizer removes the scale after the quadratic form.
  localparam int  CONIC_SH    = 8;
  typedef logic signed [FXW-1:0] fx_t;
  localparam fx_t CONIC_SCALE = fx_t'(32'sd1 <<< (FRAC + CONIC_SH));

  localparam fx_t FX_ONE  = 32'sd65536;
  localparam fx_t FX_HALF = 32'sd32768;
  localparam fx_t FX_MAX  = 32'sh7fffffff;
  localparam fx_t FX_MIN  = 32'sh80000000;

  localparam int KW   = 15;   // sort key width (sign bit skipped)
  localparam int VW   = 16;   // value (Gaussian index) width
  localparam int GW   = 16;   // Gaussian index width

  typedef logic [KW-1:0] key_t;
  typedef logic [VW-1:0] gidx_t;

  // Projected Gaussian as consumed by the rasterizer (one "sorted buffer" entry).
  typedef struct packed {
    fx_t u;        // pimg.x
    fx_t v;        // pimg.y
    fx_t ca;       // conic.x * 2^CONIC_SH
    fx_t cb;       // conic.y * 2^CONIC_SH
    fx_t cc;       // conic.z * 2^CONIC_SH
    fx_t opacity;
    fx_t r;
    fx_t g;
    fx_t b;
  } feat_t;
  localparam int FEAT_WORDS = 9;

  // Record read by Stage 1 from DRAM (11 words).
  typedef struct packed {
    fx_t   x, y, z;
    fx_t   s00, s01, s02, s11, s12, s22;  // 3D covariance (upper triangle)
    fx_t   opacity;
    logic [31:0] sh_idx;                  // codebook index in bits [7:0]
  } grec_t;
  localparam int GREC_WORDS = 11;

  // Camera set used for one frame.
  typedef struct packed {
    fx_t [2:0][3:0] view;   // rows of the world-to-camera matrix [R | t]
    fx_t fx, fy, cx, cy;    // pinhole intrinsics
    fx_t znear;
    fx_t [2:0] campos;      // camera centre in world space
  } cam_t;

  // DRAM word address map (32-bit words). The two parities double-buffer the
  // data produced by preprocessing and consumed by rendering.
  localparam logic [31:0] VIEW_BASE = 32'h0000_0000;  // 4 words per Gaussian
  localparam logic [31:0] REC_BASE  = 32'h0100_0000;  // 16 words per Gaussian
  localparam logic [31:0] MASK_BASE = 32'h0200_0000;  // 1 bit per Gaussian
  localparam logic [31:0] CB_BASE   = 32'h0210_0000;  // codebook, 12 words per entry
  localparam logic [31:0] FEAT_BASE = 32'h0400_0000;  // + parity*2^24, 16 words per Gaussian
  localparam logic [31:0] LIST_BASE = 32'h1000_0000;  // + parity*2^27, TILE_CAP words per tile

  function automatic fx_t fx_sat(input logic signed [63:0] v);
    if (v > 64'sd2147483647)       return FX_MAX;
    else if (v < -64'sd2147483648) return FX_MIN;
    else                           return fx_t'(v);
  endfunction

  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return fx_sat(p >>> FRAC);
  endfunction

  function automatic fx_t fx_add(input fx_t a, input fx_t b);
    return fx_sat(64'(a) + 64'(b));
  endfunction

  // a / b in Q16.16; division by zero saturates with the sign of a.
  function automatic fx_t fx_div(input fx_t a, input fx_t b);
    logic signed [63:0] n, q;
    if (b == 0) return (a < 0) ? FX_MIN : FX_MAX;
    n = 64'(a) <<< FRAC;
    q = n / 64'(b);
    return fx_sat(q);
  endfunction

  // Square root of a non-negative Q16.16 value (negative inputs give 0),
  // bit-serial restoring method on the 48-bit radicand a << 16.
  function automatic fx_t fx_sqrt(input fx_t a);
    logic [47:0] rad;
    logic [49:0] rem, trial;
    logic [23:0] root;
    if (a <= 0) return '0;
    rad  = {a[31:0], 16'h0};
    rem  = '0;
    root = '0;
    for (int i = 23; i >= 0; i--) begin
      rem   = {rem[47:0], rad[2*i+1 -: 2]};
      trial = {24'h0, root, 2'b01};
      if (rem >= trial) begin
        rem  = rem - trial;
        root = {root[22:0], 1'b1};
      end else begin
        root = {root[22:0], 1'b0};
      end
    end
    return fx_t'({8'h0, root});
  endfunction

  // exp(x) for x <= 0, Q16.16 in and out; positive inputs are clamped to 0.
  function automatic fx_t fx_exp(input fx_t x);
    localparam fx_t LOG2E = 32'sd94548;   // 1.442695 * 2^16
    fx_t y, f, p;
    logic signed [15:0] n;
    if (x >= 0) return FX_ONE;
    y = fx_mul(x, LOG2E);                 // y <= 0
    n = y[31:16];                         // floor(y)
    f = {16'h0, y[15:0]};                 // fractional part in [0,1)
    // 2^f ~ 1 + f*(0.65685 + 0.34315 f): exact at f = 0, 0.5, 1
    p = FX_ONE + fx_mul(f, 32'sd43047 + fx_mul(f, 32'sd22489));
    if (n <= -16'sd31) return '0;
    return p >>> (-n);
  endfunction

  // Depth (Q16.16) to the 15-bit sort key: Q8.7, saturated, inverted so that
  // the largest-element sorter emits the nearest Gaussian first.
  function automatic key_t depth_key(input fx_t z);
    logic [14:0] d;
    if (z <= 0)                 d = '0;
    else if (z >= 32'sd16777216) d = '1;     // >= 256.0
    else                        d = z[23:9];
    return ~d;
  endfunction

endpackage
