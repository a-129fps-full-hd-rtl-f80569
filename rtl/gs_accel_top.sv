// gs_accel_top: real-time 3D Gaussian Splatting accelerator.
//
// Four pipeline stages around one memory controller:
//   Stage 0  near-plane culling      point-based   (stage0_unit)
//   Stage 1  projection + duplicate  point-based   (stage1_unit, shared 6x1 PE array)
//   Stage 2  per-tile sorting        tile-based    (render_lane x NLANE, sub-sorters)
//   Stage 3  alpha blending          tile-based    (render_lane x NLANE, rasterizers)
// Stages 0 and 1 run together on one frame (the preprocessing step); Stages 2
// and 3 can only start once every Gaussian of that frame is projected, so the
// two halves form a frame-level pipeline: while the lanes render frame f, the
// preprocessing step already works on frame f+1. Features, key lists and tile
// counts are double-buffered by frame parity so the two halves never share
// data. The stage split, the four-way lane parallelism and the buffers follow
// the reference architecture; the control and the memory map are this
// design's own.
//
// Frame interface: frame_start (accepted when frame_ready) with n_gauss and
// the camera. frame_done pulses when the last tile of a frame has been output.
// Pixels leave on NLANE streams: px_valid[l] with the tile number, the pixel
// group and PIX_PAR 24-bit RGB pixels. The off-chip DRAM is outside; the
// mem_* port is a simple in-order request/return port of 32-bit words.
module gs_accel_top
  import gs_pkg::*;
#(
  parameter int IMG_W    = 1920,
  parameter int IMG_H    = 1080,
  parameter int TILE     = 16,
  parameter int NLANE    = 4,
  parameter int NSORT    = 256,
  parameter int LOCAL_DEPTH  = 2000,
  parameter int GLOBAL_DEPTH = 6000,
  parameter int TILE_CAP = 8000,
  parameter int PIX_PAR  = 16,
  parameter int VIEW_DEPTH = 1536,
  parameter int PRE_DEPTH  = 512,
  parameter int CB_ENTRIES = 256,
  localparam int TX  = (IMG_W + TILE - 1) / TILE,
  localparam int TY  = (IMG_H + TILE - 1) / TILE,
  localparam int NT  = TX * TY,
  localparam int TW  = $clog2(NT),
  localparam int CW  = $clog2(TILE_CAP + 1),
  localparam int NG  = TILE * TILE / PIX_PAR,
  localparam int GWD = (NG > 1) ? $clog2(NG) : 1,
  localparam int GAW = $clog2(GLOBAL_DEPTH)
) (
  input  logic        clk,
  input  logic        rst,
  // frame control
  input  logic        frame_start,
  output logic        frame_ready,
  input  logic [31:0] n_gauss,
  input  cam_t        cam,
  output logic        frame_done,
  // off-chip DRAM port
  output logic        mem_req,
  output logic        mem_we,
  output logic [31:0] mem_addr,
  output logic [31:0] mem_wdata,
  input  logic        mem_rvalid,
  input  logic [31:0] mem_rdata,
  // pixel output
  output logic [NLANE-1:0]                       px_valid,
  output logic [NLANE-1:0][TW-1:0]               px_tile,
  output logic [NLANE-1:0][GWD-1:0]              px_grp,
  output logic [NLANE-1:0][PIX_PAR-1:0][23:0]    px_rgb,
  // statistics of the last frame
  output logic [31:0] st_culled,
  output logic [31:0] st_visible,
  output logic [31:0] st_keys,
  output logic [31:0] st_dropped,
  output logic [NLANE-1:0][31:0] st_early,
  output logic [NLANE-1:0][31:0] st_global,
  output logic [NLANE-1:0][31:0] st_chunked,
  output logic [NLANE-1:0][31:0] st_stall,
  output logic [NLANE-1:0][31:0] st_blended,
  output logic [NLANE-1:0][31:0] st_pruned,
  output logic [NLANE-1:0][31:0] st_term
);
  localparam int NCLI = 4 + NLANE;

  // ---------------- memory controller ----------------
  logic [NCLI-1:0]       c_req, c_we, c_gnt, c_rvalid;
  logic [NCLI-1:0][31:0] c_addr, c_wdata;
  logic [31:0]           c_rdata;

  mem_ctrl #(.NCLI(NCLI), .MAXOUT(16)) u_memctrl (
    .clk, .rst, .cli_req(c_req), .cli_we(c_we), .cli_addr(c_addr), .cli_wdata(c_wdata),
    .cli_gnt(c_gnt), .cli_rvalid(c_rvalid), .cli_rdata(c_rdata),
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_rvalid, .mem_rdata
  );

  // ---------------- frame control ----------------
  cam_t  cam_pre;
  logic  pre_par, pend_par, ren_par;
  logic  pre_busy, pend, ren_busy, s0_fin;
  logic  s0_done, s1_done, s0_busy, s1_busy;
  logic  pre_start, ren_start;
  logic [NLANE-1:0] lane_done, lane_fin, lane_busy;

  assign frame_ready = !pre_busy && !pend;
  assign pre_start   = frame_start && frame_ready;
  assign ren_start   = pend && !ren_busy;

  always_ff @(posedge clk) begin
    if (rst) begin
      pre_par <= 1'b0; pend_par <= 1'b0; ren_par <= 1'b0; pre_busy <= 1'b0; pend <= 1'b0;
      ren_busy <= 1'b0; s0_fin <= 1'b0; lane_fin <= '0; frame_done <= 1'b0;
    end else begin
      frame_done <= 1'b0;
      if (pre_start) begin cam_pre <= cam; pre_busy <= 1'b1; s0_fin <= 1'b0; end
      if (s0_done) s0_fin <= 1'b1;
      if (s1_done) begin pre_busy <= 1'b0; pend <= 1'b1; pend_par <= pre_par; end
      if (ren_start) begin
        pend <= 1'b0; ren_busy <= 1'b1; ren_par <= pend_par; pre_par <= ~pend_par; lane_fin <= '0;
      end else if (ren_busy) begin
        if ((lane_fin | lane_done) == {NLANE{1'b1}}) begin ren_busy <= 1'b0; frame_done <= 1'b1; end
        lane_fin <= lane_fin | lane_done;
      end
    end
  end

  // ---------------- Stage 0 ----------------
  logic  p_valid, p_pop;
  gidx_t p_gidx;

  stage0_unit #(.VIEW_DEPTH(VIEW_DEPTH)) u_stage0 (
    .clk, .rst, .start(pre_start), .n_gauss, .cam(pre_start ? cam : cam_pre),
    .done(s0_done), .busy(s0_busy),
    .rreq(c_req[0]), .raddr(c_addr[0]), .rgnt(c_gnt[0]), .rvalid(c_rvalid[0]), .rdata(c_rdata),
    .wreq(c_req[1]), .waddr(c_addr[1]), .wdata(c_wdata[1]), .wgnt(c_gnt[1]),
    .p_valid, .p_gidx, .p_pop, .n_culled(st_culled), .n_visible(st_visible)
  );
  assign c_we[0] = 1'b0; assign c_wdata[0] = '0;
  assign c_we[1] = 1'b1;

  // ---------------- tile address offset controller ----------------
  logic          tc_inc, tc_full, tc_busy;
  logic [TW-1:0] tc_tile;
  logic [CW-1:0] tc_cnt;
  logic [NLANE-1:0][TW-1:0] rd_tile;
  logic [NLANE-1:0][CW-1:0] rd_cnt;

  tile_counter #(.NTILES(NT), .TILE_CAP(TILE_CAP), .NRD(NLANE)) u_tilecnt (
    .clk, .rst, .clear(pre_start), .clear_bank(pre_par), .busy(tc_busy),
    .inc(tc_inc), .inc_bank(pre_par), .inc_tile(tc_tile), .inc_cnt(tc_cnt), .inc_full(tc_full),
    .rd_bank(ren_par), .rd_tile, .rd_cnt
  );

  // ---------------- Stage 1 ----------------
  stage1_unit #(.IMG_W(IMG_W), .IMG_H(IMG_H), .TILE(TILE), .CB_ENTRIES(CB_ENTRIES),
                .PRE_DEPTH(PRE_DEPTH), .TILE_CAP(TILE_CAP)) u_stage1 (
    .clk, .rst, .start(pre_start), .cam(cam_pre), .parity(pre_par), .src_done(s0_fin),
    .done(s1_done), .busy(s1_busy),
    .p_valid, .p_gidx, .p_pop,
    .rreq(c_req[2]), .raddr(c_addr[2]), .rgnt(c_gnt[2]), .rvalid(c_rvalid[2]), .rdata(c_rdata),
    .wreq(c_req[3]), .waddr(c_addr[3]), .wdata(c_wdata[3]), .wgnt(c_gnt[3]),
    .tc_inc, .tc_tile, .tc_cnt, .tc_full, .tc_busy,
    .n_proj(), .n_keys(st_keys), .n_drop(st_dropped)
  );
  assign c_we[2] = 1'b0; assign c_wdata[2] = '0;
  assign c_we[3] = 1'b1;

  // ---------------- Stages 2 and 3: render lanes ----------------
  logic [NLANE-1:0]          g_acq, g_gnt, g_we, g_re;
  logic [NLANE-1:0][GAW-1:0] g_waddr, g_raddr;
  logic [NLANE-1:0][31:0]    g_wdata;
  logic [31:0]               g_rdata;

  kv_global_buffer #(.NLANE(NLANE), .DEPTH(GLOBAL_DEPTH)) u_global (
    .clk, .rst, .acq(g_acq), .gnt(g_gnt), .we(g_we), .waddr(g_waddr), .wdata(g_wdata),
    .re(g_re), .raddr(g_raddr), .rdata(g_rdata)
  );

  for (genvar l = 0; l < NLANE; l++) begin : g_lane
    render_lane #(.LANE_ID(l), .NLANE(NLANE), .IMG_W(IMG_W), .IMG_H(IMG_H), .TILE(TILE),
                  .TILE_CAP(TILE_CAP), .LOCAL_DEPTH(LOCAL_DEPTH), .GLOBAL_DEPTH(GLOBAL_DEPTH),
                  .NSORT(NSORT), .PIX_PAR(PIX_PAR)) u_lane (
      .clk, .rst, .start(ren_start), .parity(ren_par), .done(lane_done[l]), .busy(lane_busy[l]),
      .cnt_tile(rd_tile[l]), .cnt_val(rd_cnt[l]),
      .rreq(c_req[4+l]), .raddr(c_addr[4+l]), .rgnt(c_gnt[4+l]), .rvalid(c_rvalid[4+l]), .rdata(c_rdata),
      .g_acq(g_acq[l]), .g_gnt(g_gnt[l]), .g_we(g_we[l]), .g_waddr(g_waddr[l]), .g_wdata(g_wdata[l]),
      .g_re(g_re[l]), .g_raddr(g_raddr[l]), .g_rdata,
      .px_valid(px_valid[l]), .px_tile(px_tile[l]), .px_grp(px_grp[l]), .px_rgb(px_rgb[l]),
      .n_tiles(), .n_early(st_early[l]), .n_global(st_global[l]), .n_chunked(st_chunked[l]),
      .n_stall(st_stall[l]), .n_blended(st_blended[l]), .n_pruned(st_pruned[l]), .n_term(st_term[l])
    );
    assign c_we[4+l]    = 1'b0;
    assign c_wdata[4+l] = '0;
  end

  logic unused;
  assign unused = ^{s0_busy, s1_busy, lane_busy};
endmodule
