// near_plane_cull: Stage 0 near-plane culling unit.
//
// Computes the camera-space depth of a Gaussian centre with one MAC,
//   z = in0*w0 + in1*w1 + in2*w2 + in3,
// where in[3:0] is the depth row of the world-to-camera matrix and w[2:0] the
// centre (x, y, z), and culls the Gaussian when the far end of its depth
// interval lies in front of the near plane: z + dz < z_near. As in the
// reference, a single MAC is used and the decision comes 4 cycles after the
// point is accepted. The half-extent dz is supplied with the point (a stored
// bounding radius); how dz is obtained is this design's choice.
//
// Handshake: a point is accepted when in_valid && in_ready. out_valid rises
// exactly LATENCY cycles later with out_cull (1 = discard), out_z and the
// index, and is held until out_ready; the result is taken when out_valid &&
// out_ready. in_ready is high when out_ready is high and the unit is idle or
// handing over its result, so one point is processed every 4 cycles.
module near_plane_cull
  import gs_pkg::*;
#(
  parameter int LATENCY = 4
) (
  input  logic        clk,
  input  logic        rst,
  input  fx_t [3:0]   row,       // in3..in0: view-matrix depth row
  input  fx_t         znear,
  input  logic        in_valid,
  output logic        in_ready,
  input  fx_t [2:0]   in_pos,    // w2..w0: x, y, z
  input  fx_t         in_dz,
  input  gidx_t       in_gidx,
  input  logic        out_ready,
  output logic        out_valid,
  output logic        out_cull,
  output fx_t         out_z,
  output gidx_t       out_gidx
);
  logic [2:0] cyc;       // 0 idle, 1..LATENCY busy
  fx_t [2:0]  pos_q;
  fx_t        dz_q;
  gidx_t      gidx_q;
  logic       en, first;
  fx_t        a, w, acc;

  // a new point may enter in the cycle the previous result leaves
  assign in_ready = (cyc == 0 || cyc == 3'(LATENCY)) && out_ready;

  // Operand issue: cycle of acceptance issues in0*w0, then in1*w1, in2*w2.
  always_comb begin
    en = 1'b0; first = 1'b0; a = '0; w = '0;
    if (in_valid && in_ready) begin
      en = 1'b1; first = 1'b1; a = row[0]; w = in_pos[0];
    end else if (cyc == 3'd1) begin
      en = 1'b1; a = row[1]; w = pos_q[1];
    end else if (cyc == 3'd2) begin
      en = 1'b1; a = row[2]; w = pos_q[2];
    end
  end

  mac_pe u_mac (.clk, .rst, .en, .first, .a, .w, .init(row[3]), .acc);

  always_ff @(posedge clk) begin
    if (rst) begin
      cyc <= '0;
    end else if (in_valid && in_ready) begin
      cyc <= 3'd1; pos_q <= in_pos; dz_q <= in_dz; gidx_q <= in_gidx;
    end else if (cyc == 3'(LATENCY)) begin
      if (out_ready) cyc <= '0;          // result held until taken
    end else if (cyc != 0) begin
      cyc <= cyc + 1'b1;
    end
  end

  assign out_valid = (cyc == 3'(LATENCY));
  assign out_z     = acc;
  assign out_cull  = fx_add(acc, dz_q) < znear;
  assign out_gidx  = gidx_q;
endmodule
