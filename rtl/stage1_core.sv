// stage1_core: Stage 1 computation of one Gaussian on the shared 6x1 PE array.
//
// From the Gaussian's centre, 3D covariance, opacity and dequantized degree-1
// SH coefficients, and from the camera, it computes everything the
// rasterizer needs: screen position (u, v) by pinhole projection, the 2D
// covariance J W Sigma W^T J^T, its inverse (the conic), the screen-space
// half extents of the 3-sigma box, the view-dependent RGB colour, and the depth.
// As in the reference, all matrix products run on one 6x1 MAC array with a
// broadcast weight, and the two identically zero Jacobian entries are never
// issued. The order of the products (eight passes, below) is this design's
// own; the reference gives the array and the submodules, not the schedule.
//
//   pass 0  t = V[:,0:3] m + V[:,3],  d = m - campos          (3 issue cycles)
//   pass 1  fx/tz, fy/tz, tx/tz, ty/tz, |d|^2                  (4)
//   pass 2  u = fx tx/tz + cx, v, J02 = -fx tx/tz^2, J12       (2)
//   pass 3  T = J W (only J00, J02, J11, J12 issued)           (4)
//   pass 4  M = T Sigma                                        (6)
//   pass 5  cov2D = M T^T + 0.3 I                              (6)
//   pass 6  e1 = c00 - c01 (c01/c11) = det/c11, e2 = det/c00,
//           view direction n = d/|d|                           (3)
//   pass 7  conic a = 1/e1, b = -(c01/c11) a, c = 1/e2 (all x 2^CONIC_SH),
//           colour = SH(n) + 0.5                               (5)
// The conic is formed without the determinant itself: in Q16.16 the
// determinant of a large footprint overflows and 1/det underflows, while
// det/c11 and det/c00 stay in the range of the diagonal terms.
//
// Scalar division and square root (1/tz, 1/|d|, c01/c11, c01/c00, 1/e1, 1/e2,
// sqrt of the diagonal)
// are done between passes by the helper functions of gs_pkg. The codebook
// holds SH coefficients already scaled by the basis constants C0 and C1.
// tz is clamped to z_near before division, so Gaussians that pass the
// interval-based culling with a centre behind the camera do not blow up.
//
// Interface: start with rec, sh and cam stable until done (one-cycle pulse);
// outputs hold until the next start. ok = 0 when the 2D covariance is singular.
// Latency: done is high 50 cycles after the start cycle (1 + 33 issue cycles
// + 2 per pass).
module stage1_core
  import gs_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        start,
  input  grec_t       rec,
  input  fx_t [11:0]  sh,        // [3*k + c]: coefficient k of colour c
  input  cam_t        cam,
  output logic        done,
  output logic        busy,
  output feat_t       feat,
  output fx_t         depth,
  output fx_t         rx,
  output fx_t         ry,
  output logic        ok
);
  localparam fx_t LOWPASS = 32'sd19661;   // 0.3

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_WAIT, S_CAP} st_t;
  st_t st;
  logic [2:0] pass;
  logic [2:0] step;
  logic [2:0] nsteps;

  // intermediate registers
  fx_t tx, ty, tz, dx, dy, dz, rz, j00, j11, j02, j12, txr, tyr, rn;
  fx_t [2:0] T0, T1, M0, M1;
  fx_t c00, c01, c11, qa, qc, ia, ic, nx, ny, nz;
  fx_t [2:0][2:0] S;

  always_comb begin
    S[0][0] = rec.s00; S[0][1] = rec.s01; S[0][2] = rec.s02;
    S[1][0] = rec.s01; S[1][1] = rec.s11; S[1][2] = rec.s12;
    S[2][0] = rec.s02; S[2][1] = rec.s12; S[2][2] = rec.s22;
  end

  always_comb begin
    case (pass)
      3'd0: nsteps = 3'd3;
      3'd1: nsteps = 3'd4;
      3'd2: nsteps = 3'd2;
      3'd3: nsteps = 3'd4;
      3'd4: nsteps = 3'd6;
      3'd5: nsteps = 3'd6;
      3'd6: nsteps = 3'd3;
      default: nsteps = 3'd5;
    endcase
  end

  // ---------------- operand issue ----------------
  logic [5:0] en, first;
  fx_t        w;
  fx_t [5:0]  in, init;
  fx_t [5:0]  out_vec;
  fx_t        out_sum;
  fx_t [2:0]  m;
  assign m = {rec.z, rec.y, rec.x};

  always_comb begin
    en = '0; first = '0; w = '0; in = '0; init = '0;
    if (st == S_ISSUE) begin
      case (pass)
        3'd0: begin
          w = m[step];
          for (int i = 0; i < 3; i++) begin
            in[i]     = cam.view[i][step];
            init[i]   = cam.view[i][3];
            in[3+i]   = (step == 3'(i)) ? FX_ONE : '0;
            init[3+i] = -cam.campos[i];
          end
          en = 6'b111111; first = (step == 0) ? 6'b111111 : '0;
        end
        3'd1: begin
          case (step)
            3'd0: begin w = rz; in[0] = cam.fx; in[1] = cam.fy; in[2] = tx; in[3] = ty;
                        en = 6'b001111; first = 6'b001111; end
            3'd1: begin w = dx; in[5] = dx; en = 6'b100000; first = 6'b100000; end
            3'd2: begin w = dy; in[5] = dy; en = 6'b100000; end
            default: begin w = dz; in[5] = dz; en = 6'b100000; end
          endcase
        end
        3'd2: begin
          if (step == 0) begin
            w = txr; in[0] = cam.fx; init[0] = cam.cx; in[2] = -j00; en = 6'b000101; first = 6'b000101;
          end else begin
            w = tyr; in[1] = cam.fy; init[1] = cam.cy; in[3] = -j11; en = 6'b001010; first = 6'b001010;
          end
        end
        3'd3: begin
          case (step)
            3'd0: begin w = j00; for (int c = 0; c < 3; c++) in[c] = cam.view[0][c];
                        en = 6'b000111; first = 6'b000111; end
            3'd1: begin w = j02; for (int c = 0; c < 3; c++) in[c] = cam.view[2][c];
                        en = 6'b000111; end
            3'd2: begin w = j11; for (int c = 0; c < 3; c++) in[3+c] = cam.view[1][c];
                        en = 6'b111000; first = 6'b111000; end
            default: begin w = j12; for (int c = 0; c < 3; c++) in[3+c] = cam.view[2][c];
                        en = 6'b111000; end
          endcase
        end
        3'd4: begin
          if (step < 3) begin
            w = T0[step];
            for (int c = 0; c < 3; c++) in[c] = S[step][c];
            en = 6'b000111; first = (step == 0) ? 6'b000111 : '0;
          end else begin
            w = T1[step-3];
            for (int c = 0; c < 3; c++) in[3+c] = S[step-3][c];
            en = 6'b111000; first = (step == 3) ? 6'b111000 : '0;
          end
        end
        3'd5: begin
          init[0] = LOWPASS; init[2] = LOWPASS;
          if (step < 3) begin
            w = T0[step]; in[0] = M0[step]; in[1] = M1[step];
            en = 6'b000011; first = (step == 0) ? 6'b000011 : '0;
          end else begin
            w = T1[step-3]; in[2] = M1[step-3];
            en = 6'b000100; first = (step == 3) ? 6'b000100 : '0;
          end
        end
        3'd6: begin
          case (step)
            3'd0: begin w = -qa; in[0] = c01; init[0] = c00; en = 6'b000001; first = 6'b000001; end
            3'd1: begin w = -qc; in[1] = c01; init[1] = c11; en = 6'b000010; first = 6'b000010; end
            default: begin w = rn; in[3] = dx; in[4] = dy; in[5] = dz;
                           en = 6'b111000; first = 6'b111000; end
          endcase
        end
        default: begin
          for (int c = 0; c < 3; c++) init[3+c] = FX_HALF;
          case (step)
            3'd0: begin w = ia; in[0] = FX_ONE; in[1] = -qa;
                        en = 6'b000011; first = 6'b000011; end
            3'd1: begin w = FX_ONE; for (int c = 0; c < 3; c++) in[3+c] = sh[c];
                        en = 6'b111000; first = 6'b111000; end
            3'd2: begin w = -ny; for (int c = 0; c < 3; c++) in[3+c] = sh[3+c]; en = 6'b111000; end
            3'd3: begin w = nz;  for (int c = 0; c < 3; c++) in[3+c] = sh[6+c]; en = 6'b111000; end
            default: begin w = -nx; for (int c = 0; c < 3; c++) in[3+c] = sh[9+c]; en = 6'b111000; end
          endcase
        end
      endcase
    end
  end

  pe_array #(.NPE(6)) u_pe (
    .clk, .rst, .en, .first, .w, .in, .init, .out_vec, .out_sum
  );

  // ---------------- sequencing and capture ----------------
  fx_t tzc;
  assign tzc = (out_vec[2] < cam.znear) ? cam.znear : out_vec[2];

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= S_IDLE; pass <= '0; step <= '0; done <= 1'b0; ok <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin st <= S_ISSUE; pass <= '0; step <= '0; end
        S_ISSUE: begin
          if (step == nsteps - 1) begin st <= S_WAIT; step <= '0; end
          else step <= step + 1'b1;
        end
        S_WAIT: st <= S_CAP;
        S_CAP: begin
          case (pass)
            3'd0: begin
              tx <= out_vec[0]; ty <= out_vec[1]; tz <= out_vec[2];
              dx <= out_vec[3]; dy <= out_vec[4]; dz <= out_vec[5];
              rz <= fx_div(FX_ONE, tzc);
            end
            3'd1: begin
              j00 <= out_vec[0]; j11 <= out_vec[1]; txr <= out_vec[2]; tyr <= out_vec[3];
              rn  <= fx_div(FX_ONE, fx_sqrt(out_vec[5]));
            end
            3'd2: begin
              feat.u <= out_vec[0]; feat.v <= out_vec[1]; j02 <= out_vec[2]; j12 <= out_vec[3];
            end
            3'd3: begin T0 <= out_vec[2:0]; T1 <= out_vec[5:3]; end
            3'd4: begin M0 <= out_vec[2:0]; M1 <= out_vec[5:3]; end
            3'd5: begin
              c00 <= out_vec[0]; c01 <= out_vec[1]; c11 <= out_vec[2];
              qa  <= fx_div(out_vec[1], out_vec[2]);     // c01 / c11
              qc  <= fx_div(out_vec[1], out_vec[0]);     // c01 / c00
            end
            3'd6: begin
              nx <= out_vec[3]; ny <= out_vec[4]; nz <= out_vec[5];
              ia   <= fx_div(CONIC_SCALE, out_vec[0]);  // c11 / det, scaled
              ic   <= fx_div(CONIC_SCALE, out_vec[1]);  // c00 / det, scaled
              ok   <= (out_vec[0] > 0) && (out_vec[1] > 0);
              rx   <= 3 * fx_sqrt(c00);
              ry   <= 3 * fx_sqrt(c11);
            end
            default: begin
              feat.ca <= out_vec[0]; feat.cb <= out_vec[1]; feat.cc <= ic;
              feat.r <= (out_vec[3] < 0) ? '0 : out_vec[3];
              feat.g <= (out_vec[4] < 0) ? '0 : out_vec[4];
              feat.b <= (out_vec[5] < 0) ? '0 : out_vec[5];
              feat.opacity <= rec.opacity;
              depth <= tz;
            end
          endcase
          if (pass == 3'd7) begin st <= S_IDLE; done <= 1'b1; end
          else begin pass <= pass + 1'b1; st <= S_ISSUE; end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
  assign busy = (st != S_IDLE);

  logic unused;
  assign unused = ^{out_sum, rec.sh_idx};
endmodule
