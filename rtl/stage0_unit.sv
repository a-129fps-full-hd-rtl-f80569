// stage0_unit: Stage 0 of the accelerator (point-based near-plane culling).
//
// For every Gaussian g of a frame, a prefetcher reads its view record
// (x, y, z, bounding radius) from DRAM at VIEW_BASE + 4g into the View SRAM,
// used here as a FIFO. The near-plane culling unit takes one record every
// 4 cycles, the culling mask gets one bit per Gaussian, and the indices of
// surviving Gaussians go into the Projection FIFO that feeds Stage 1.
// This follows the Stage 0 column of the reference block diagram; the record
// layout and the prefetch policy are this design's own.
//
// Interface: start (one cycle) with n_gauss and the camera; done is a
// one-cycle pulse once every Gaussian has been decided and the mask flushed.
// Two memory clients: a read port (prefetch) and a write port (mask).
// Stage 1 pops surviving indices with p_pop while p_valid.
module stage0_unit
  import gs_pkg::*;
#(
  parameter int VIEW_DEPTH = 1536,
  parameter int PFIFO_DEPTH = 64
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        start,
  input  logic [31:0] n_gauss,
  input  cam_t        cam,
  output logic        done,
  output logic        busy,
  // prefetch read client
  output logic        rreq,
  output logic [31:0] raddr,
  input  logic        rgnt,
  input  logic        rvalid,
  input  logic [31:0] rdata,
  // mask write client
  output logic        wreq,
  output logic [31:0] waddr,
  output logic [31:0] wdata,
  input  logic        wgnt,
  // projection FIFO output
  output logic        p_valid,
  output gidx_t       p_gidx,
  input  logic        p_pop,
  // statistics
  output logic [31:0] n_culled,
  output logic [31:0] n_visible
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_FLUSH} st_t;
  st_t st;

  logic [31:0] iw, rw, decided, total_words, npushed;
  logic [2:0][31:0] asm_q;
  logic [127:0] vrec;
  logic v_push, v_pop, v_full, v_empty;
  logic [127:0] v_rdata;
  logic [$clog2(VIEW_DEPTH+1)-1:0] v_count;
  logic [31:0] inflight_rec;
  gidx_t cull_gidx;

  // ---------------- prefetch into the View SRAM ----------------
  assign total_words  = n_gauss << 2;
  assign inflight_rec = (iw - (npushed << 2) + 32'd3) >> 2;
  assign rreq  = (st == S_RUN) && (iw < total_words) &&
                 (32'(v_count) + inflight_rec + 32'd1 < 32'(VIEW_DEPTH));
  assign raddr = VIEW_BASE + iw;
  assign v_push = rvalid && (rw[1:0] == 2'd3);
  assign vrec   = {rdata, asm_q[2], asm_q[1], asm_q[0]};   // radius, z, y, x

  always_ff @(posedge clk) begin
    if (rst || start) begin
      iw <= '0; rw <= '0; npushed <= '0;
    end else begin
      if (rreq && rgnt) iw <= iw + 1;
      if (rvalid) begin
        asm_q[rw[1:0]] <= rdata;
        rw <= rw + 1;
        if (rw[1:0] == 2'd3) npushed <= npushed + 1;
      end
    end
  end

  sync_fifo #(.WIDTH(128), .DEPTH(VIEW_DEPTH)) u_view_sram (
    .clk, .rst(rst || start), .push(v_push), .wdata(vrec), .pop(v_pop), .rdata(v_rdata),
    .full(v_full), .empty(v_empty), .count(v_count)
  );

  // ---------------- near-plane culling ----------------
  logic c_in_ready, c_out_valid, c_out_cull, pf_full, pf_empty, m_busy, m_done;
  fx_t  c_out_z;
  gidx_t c_out_gidx;
  logic [$clog2(PFIFO_DEPTH+1)-1:0] pf_count;

  logic c_out_ready, c_take;
  assign v_pop = !v_empty && c_in_ready;
  assign c_out_ready = !pf_full && !m_busy && (st == S_RUN);
  assign c_take = c_out_valid && c_out_ready;

  near_plane_cull u_cull (
    .clk, .rst, .row(cam.view[2]), .znear(cam.znear),
    .in_valid(!v_empty), .in_ready(c_in_ready),
    .in_pos({v_rdata[95:64], v_rdata[63:32], v_rdata[31:0]}), .in_dz(v_rdata[127:96]),
    .in_gidx(cull_gidx),
    .out_ready(c_out_ready),
    .out_valid(c_out_valid), .out_cull(c_out_cull), .out_z(c_out_z), .out_gidx(c_out_gidx)
  );

  always_ff @(posedge clk) begin
    if (rst || start) cull_gidx <= '0;
    else if (v_pop)   cull_gidx <= cull_gidx + 1'b1;
  end

  sync_fifo #(.WIDTH(GW), .DEPTH(PFIFO_DEPTH)) u_proj_fifo (
    .clk, .rst(rst || start), .push(c_take && !c_out_cull), .wdata(c_out_gidx),
    .pop(p_pop), .rdata(p_gidx), .full(pf_full), .empty(pf_empty), .count(pf_count)
  );
  assign p_valid = !pf_empty;

  cull_mask u_mask (
    .clk, .rst, .clear(start), .bit_valid(c_take), .bit_val(c_out_cull), .bit_gidx(c_out_gidx),
    .flush(st == S_RUN && decided == n_gauss && !m_busy), .busy(m_busy), .done(m_done),
    .mreq(wreq), .maddr(waddr), .mwdata(wdata), .mgnt(wgnt)
  );

  // ---------------- control ----------------
  always_ff @(posedge clk) begin
    if (rst) begin
      st <= S_IDLE; decided <= '0; n_culled <= '0; n_visible <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          st <= S_RUN; decided <= '0; n_culled <= '0; n_visible <= '0;
        end
        S_RUN: begin
          if (c_take) begin
            decided <= decided + 1;
            if (c_out_cull) n_culled <= n_culled + 1;
            else            n_visible <= n_visible + 1;
          end
          if (decided == n_gauss && !m_busy) st <= S_FLUSH;
        end
        S_FLUSH: if (m_done) begin st <= S_IDLE; done <= 1'b1; end
        default: st <= S_IDLE;
      endcase
    end
  end
  assign busy = (st != S_IDLE);

  logic unused;
  assign unused = ^{c_out_z, pf_count, v_full};
endmodule
