// stage1_unit: Stage 1 of the accelerator (point-based projection).
//
// Three processes run concurrently:
//  * fetch: at the start of a frame it loads the VQ codebook from DRAM
//    (CB_BASE, 12 words per entry); then it pops the indices of visible
//    Gaussians from the Projection FIFO, reads each 11-word record from
//    REC_BASE + 16g and pushes it, with its index, into the Preprocess SRAM
//    (a FIFO of records).
//  * compute: pops a record, dequantizes its SH index through the codebook
//    and runs stage1_core (projection, inverse covariance, colour).
//  * write-back: writes the 9-word feature record to
//    FEAT_BASE + parity*2^24 + 16g, then duplicates the Gaussian over the
//    tiles it covers and writes each <key, value> word into the tile's list at
//    LIST_BASE + parity*2^27 + tile*TILE_CAP + count, the count coming from
//    the tile address offset controller. Keys beyond TILE_CAP are dropped and
//    counted in n_drop.
// The split into these submodules follows the reference's Stage 1 column
// (Dequantization, Projection, InverseConv, Duplicate); the memory layout and
// the buffering policy are this design's own.
//
// Interface: start (with n_gauss unused here, cam and parity) begins a frame;
// src_done says Stage 0 has finished, after which done pulses once all work
// has drained. Memory clients: one read port, one write port. The tile
// counter's increment port is driven from here; while the counter reports
// busy (clearing the frame's bank) no key is written.
module stage1_unit
  import gs_pkg::*;
#(
  parameter int IMG_W = 1920,
  parameter int IMG_H = 1080,
  parameter int TILE  = 16,
  parameter int CB_ENTRIES = 256,
  parameter int PRE_DEPTH = 512,
  parameter int TILE_CAP = 8000,
  localparam int NT = ((IMG_W + TILE - 1) / TILE) * ((IMG_H + TILE - 1) / TILE),
  localparam int TW = $clog2(NT),
  localparam int CW = $clog2(TILE_CAP + 1)
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        start,
  input  cam_t        cam,
  input  logic        parity,
  input  logic        src_done,     // Stage 0 finished (level)
  output logic        done,
  output logic        busy,
  // projection FIFO side
  input  logic        p_valid,
  input  gidx_t       p_gidx,
  output logic        p_pop,
  // read client
  output logic        rreq,
  output logic [31:0] raddr,
  input  logic        rgnt,
  input  logic        rvalid,
  input  logic [31:0] rdata,
  // write client
  output logic        wreq,
  output logic [31:0] waddr,
  output logic [31:0] wdata,
  input  logic        wgnt,
  // tile counter increment port
  output logic        tc_inc,
  output logic [TW-1:0] tc_tile,
  input  logic [CW-1:0] tc_cnt,
  input  logic        tc_full,
  input  logic        tc_busy,
  // statistics
  output logic [31:0] n_proj,
  output logic [31:0] n_keys,
  output logic [31:0] n_drop
);
  localparam int CBW = CB_ENTRIES * 12;
  localparam int EW  = $clog2(CB_ENTRIES);

  // ================= fetch =================
  typedef enum logic [1:0] {F_IDLE, F_CB, F_REC} fst_t;
  fst_t fst;
  logic [31:0] f_iw, f_rw;       // issued / returned words of current item
  gidx_t f_gidx;
  logic  f_busy_rec;
  logic [GREC_WORDS-1:0][31:0] f_asm;
  logic [EW-1:0] cb_entry;
  logic [3:0]    cb_coef;
  logic pre_push, pre_pop, pre_full, pre_empty;
  logic [GREC_WORDS*32+GW-1:0] pre_wdata, pre_rdata;
  logic [$clog2(PRE_DEPTH+1)-1:0] pre_count;

  always_comb begin
    rreq = 1'b0; raddr = '0;
    if (fst == F_CB && f_iw < CBW) begin
      rreq = 1'b1; raddr = CB_BASE + f_iw;
    end else if (fst == F_REC && f_busy_rec && f_iw < GREC_WORDS) begin
      rreq = 1'b1; raddr = REC_BASE + (32'(f_gidx) << 4) + f_iw;
    end
  end

  assign p_pop = (fst == F_REC) && !f_busy_rec && p_valid && !pre_full;

  // record words arrive x, y, z, s00, s01, s02, s11, s12, s22, opacity, sh_idx
  always_comb begin
    pre_wdata = '0;
    for (int k = 0; k < GREC_WORDS - 1; k++)
      pre_wdata[GW + 32*(GREC_WORDS-1-k) +: 32] = f_asm[k];
    pre_wdata[GW +: 32] = rdata;          // last word: sh_idx
    pre_wdata[GW-1:0]   = f_gidx;
  end
  assign pre_push = (fst == F_REC) && f_busy_rec && rvalid && (f_rw == GREC_WORDS - 1);

  always_ff @(posedge clk) begin
    if (rst) begin
      fst <= F_IDLE; f_iw <= '0; f_rw <= '0; f_busy_rec <= 1'b0; cb_entry <= '0; cb_coef <= '0;
    end else begin
      case (fst)
        F_IDLE: if (start) begin fst <= F_CB; f_iw <= '0; f_rw <= '0; cb_entry <= '0; cb_coef <= '0; end
        F_CB: begin
          if (rreq && rgnt) f_iw <= f_iw + 1;
          if (rvalid) begin
            f_rw <= f_rw + 1;
            if (cb_coef == 4'd11) begin cb_coef <= '0; cb_entry <= cb_entry + 1'b1; end
            else cb_coef <= cb_coef + 1'b1;
            if (f_rw == CBW - 1) begin fst <= F_REC; f_iw <= '0; f_rw <= '0; end
          end
        end
        F_REC: begin
          if (p_pop) begin f_busy_rec <= 1'b1; f_gidx <= p_gidx; f_iw <= '0; f_rw <= '0; end
          if (rreq && rgnt) f_iw <= f_iw + 1;
          if (rvalid) begin
            f_asm[f_rw] <= rdata;
            f_rw <= f_rw + 1;
            if (f_rw == GREC_WORDS - 1) f_busy_rec <= 1'b0;
          end
          if (start) begin fst <= F_CB; f_iw <= '0; f_rw <= '0; cb_entry <= '0; cb_coef <= '0; end
        end
        default: fst <= F_IDLE;
      endcase
    end
  end

  // ================= codebook + Preprocess SRAM =================
  logic       cb_rd;
  fx_t [11:0] cb_sh;
  grec_t      c_rec;
  gidx_t      c_gidx;

  codebook #(.ENTRIES(CB_ENTRIES)) u_codebook (
    .clk, .ld_we(fst == F_CB && rvalid), .ld_entry(cb_entry), .ld_coef(cb_coef), .ld_data(rdata),
    .rd_en(cb_rd), .rd_idx(pre_rdata[GW +: EW]), .rd_sh(cb_sh)
  );

  sync_fifo #(.WIDTH(GREC_WORDS*32+GW), .DEPTH(PRE_DEPTH)) u_pre_sram (
    .clk, .rst(rst || start), .push(pre_push), .wdata(pre_wdata), .pop(pre_pop), .rdata(pre_rdata),
    .full(pre_full), .empty(pre_empty), .count(pre_count)
  );

  // ================= compute + write-back =================
  typedef enum logic [2:0] {C_IDLE, C_LOOK, C_CORE, C_WFEAT, C_DUP, C_WAITDUP} cst_t;
  cst_t cst;
  logic core_start, core_done, core_busy, core_ok;
  feat_t core_feat;
  fx_t core_depth, core_rx, core_ry;
  logic [3:0] wf;                     // feature word counter
  logic [FEAT_WORDS-1:0][31:0] feat_words;

  assign pre_pop = (cst == C_IDLE) && !pre_empty;
  assign cb_rd   = pre_pop;

  always_ff @(posedge clk) if (pre_pop) begin
    c_rec  <= grec_t'(pre_rdata[GW +: GREC_WORDS*32]);
    c_gidx <= pre_rdata[GW-1:0];
  end

  assign core_start = (cst == C_LOOK);

  stage1_core u_core (
    .clk, .rst, .start(core_start), .rec(c_rec), .sh(cb_sh), .cam,
    .done(core_done), .busy(core_busy), .feat(core_feat), .depth(core_depth),
    .rx(core_rx), .ry(core_ry), .ok(core_ok)
  );

  assign feat_words = {core_feat.u, core_feat.v, core_feat.ca, core_feat.cb, core_feat.cc,
                       core_feat.opacity, core_feat.r, core_feat.g, core_feat.b};

  // duplicate
  logic d_start, d_valid, d_ready, d_done;
  logic [TW-1:0] d_tile;
  key_t d_key;
  gidx_t d_val;
  logic [15:0] d_n;

  assign d_start = (cst == C_WFEAT) && wgnt && (wf == FEAT_WORDS - 1);

  tile_duplicate #(.IMG_W(IMG_W), .IMG_H(IMG_H), .TILE(TILE)) u_dup (
    .clk, .rst, .start(d_start), .u(core_feat.u), .v(core_feat.v), .rx(core_rx), .ry(core_ry),
    .depth(core_depth), .gidx(c_gidx), .ok(core_ok),
    .e_valid(d_valid), .e_ready(d_ready), .e_tile(d_tile), .e_key(d_key), .e_val(d_val),
    .done(d_done), .n_emit(d_n)
  );

  // a key is written (or dropped when the tile is full) when granted
  assign tc_tile = d_tile;
  logic dup_go;
  assign dup_go  = (cst == C_DUP) && !tc_busy;      // wait while the counters are being cleared
  assign d_ready = dup_go && (tc_full || wgnt);
  assign tc_inc  = dup_go && d_valid && (tc_full || wgnt);

  always_comb begin
    wreq = 1'b0; waddr = '0; wdata = '0;
    if (cst == C_WFEAT) begin
      wreq  = 1'b1;
      waddr = FEAT_BASE + (32'(parity) << 24) + (32'(c_gidx) << 4) + 32'(wf);
      wdata = feat_words[FEAT_WORDS-1-wf];
    end else if (dup_go && d_valid && !tc_full) begin
      wreq  = 1'b1;
      waddr = LIST_BASE + (32'(parity) << 27) + 32'(d_tile) * TILE_CAP + 32'(tc_cnt);
      wdata = {1'b0, d_key, d_val};
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cst <= C_IDLE; wf <= '0; n_proj <= '0; n_keys <= '0; n_drop <= '0;
    end else begin
      if (start) begin n_proj <= '0; n_keys <= '0; n_drop <= '0; end
      case (cst)
        C_IDLE:  if (pre_pop) cst <= C_LOOK;
        C_LOOK:  cst <= C_CORE;
        C_CORE:  if (core_done) begin cst <= C_WFEAT; wf <= '0; n_proj <= n_proj + 1; end
        C_WFEAT: if (wgnt) begin
                   if (wf == FEAT_WORDS - 1) cst <= C_DUP;
                   wf <= wf + 1'b1;
                 end
        C_DUP: begin
          if (tc_inc) begin
            if (tc_full) n_drop <= n_drop + 1;
            else         n_keys <= n_keys + 1;
          end
          if (d_done) cst <= C_IDLE;
        end
        default: cst <= C_IDLE;
      endcase
    end
  end

  // ================= frame completion =================
  logic running;
  always_ff @(posedge clk) begin
    if (rst) begin running <= 1'b0; done <= 1'b0; end
    else begin
      done <= 1'b0;
      if (start) running <= 1'b1;
      else if (running && src_done && fst == F_REC && !f_busy_rec && !p_valid && pre_empty &&
               cst == C_IDLE && !start) begin
        running <= 1'b0; done <= 1'b1;
      end
    end
  end
  assign busy = running;

  logic unused;
  assign unused = ^{core_busy, pre_count, d_n};
endmodule
