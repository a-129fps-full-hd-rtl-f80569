// render_lane: one of the four tile-based rendering lanes (Stage 2 + Stage 3).
//
// Lane LANE_ID renders tiles LANE_ID, LANE_ID + NLANE, ... of a frame. For
// each tile it
//  1. reads the tile's key count from the tile address offset controller;
//  2. copies the tile's key/value list from DRAM into its own 2000-entry
//     key/value buffer, spilling entries beyond 2000 into the shared global
//     buffer (acquired for the duration of the tile);
//  3. works through the list in chunks of N = 256 keys: loads the chunk's keys
//     into the comparison-free sub-sorter, fetches the chunk's feature records
//     from DRAM into the Feature SRAM (slot = position in the chunk), then
//     lets the sorter emit slots nearest-first; each emitted slot's features
//     are read into the one-point sorted buffer and handed to the rasterizer;
//  4. stops early when the rasterizer reports every pixel finished (early
//     termination: remaining keys are never sorted), then streams the tile's
//     pixels out.
// The buffers, the 256-key sorter, the global buffer and the one-point
// sorted buffer follow the reference architecture. Ordering a tile of more
// than 256 keys chunk by chunk (exact depth order only within a chunk) is
// this design's choice; the reference does not say how longer lists are
// handled. The sorter stalls (o_ready low) while the rasterizer is busy.
//
// Memory client: one read port for list and feature words. Output: one
// group of PIX_PAR pixels per cycle with the tile number.
module render_lane
  import gs_pkg::*;
#(
  parameter int LANE_ID  = 0,
  parameter int NLANE    = 4,
  parameter int IMG_W    = 1920,
  parameter int IMG_H    = 1080,
  parameter int TILE     = 16,
  parameter int TILE_CAP = 8000,
  parameter int LOCAL_DEPTH  = 2000,
  parameter int GLOBAL_DEPTH = 6000,
  parameter int NSORT    = 256,
  parameter int PIX_PAR  = 16,
  localparam int TX  = (IMG_W + TILE - 1) / TILE,
  localparam int TY  = (IMG_H + TILE - 1) / TILE,
  localparam int NT  = TX * TY,
  localparam int TW  = $clog2(NT),
  localparam int CW  = $clog2(TILE_CAP + 1),
  localparam int SW  = $clog2(NSORT),
  localparam int GAW = $clog2(GLOBAL_DEPTH),
  localparam int NG  = TILE * TILE / PIX_PAR,
  localparam int GWD = (NG > 1) ? $clog2(NG) : 1
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        start,
  input  logic        parity,
  output logic        done,
  output logic        busy,
  // tile counter read port
  output logic [TW-1:0] cnt_tile,
  input  logic [CW-1:0] cnt_val,
  // memory read client
  output logic        rreq,
  output logic [31:0] raddr,
  input  logic        rgnt,
  input  logic        rvalid,
  input  logic [31:0] rdata,
  // global buffer port
  output logic        g_acq,
  input  logic        g_gnt,
  output logic        g_we,
  output logic [GAW-1:0] g_waddr,
  output logic [31:0] g_wdata,
  output logic        g_re,
  output logic [GAW-1:0] g_raddr,
  input  logic [31:0] g_rdata,
  // pixel output
  output logic        px_valid,
  output logic [TW-1:0] px_tile,
  output logic [GWD-1:0] px_grp,
  output logic [PIX_PAR-1:0][23:0] px_rgb,
  // statistics
  output logic [31:0] n_tiles,
  output logic [31:0] n_early,
  output logic [31:0] n_global,
  output logic [31:0] n_chunked,
  output logic [31:0] n_stall,
  output logic [31:0] n_blended,
  output logic [31:0] n_pruned,
  output logic [31:0] n_term
);
  typedef enum logic [3:0] {L_IDLE, L_TILE, L_ACQ, L_LOAD, L_KEYLD, L_FETCH, L_SORT, L_OUT, L_OUTW} lst_t;
  lst_t st;

  logic [TW:0]  t;            // current tile
  logic [CW-1:0] n;           // keys in the tile
  logic [CW-1:0] iss, ret;    // list words issued / returned
  logic [CW-1:0] base;        // first key of the current chunk
  logic [SW:0]   m;           // keys in the current chunk
  logic [SW:0]   kj;          // key-load issue index
  logic [31:0]   list_addr;
  logic          used_global;
  logic          early_flag;

  assign cnt_tile  = TW'(t);
  assign list_addr = LIST_BASE + (32'(parity) << 27) + 32'(t) * TILE_CAP;

  // ---------------- local key/value buffer ----------------
  logic l_we, l_re;
  logic [$clog2(LOCAL_DEPTH)-1:0] l_waddr, l_raddr;
  logic [31:0] l_rdata;
  sram_1r1w #(.WIDTH(32), .DEPTH(LOCAL_DEPTH)) u_kv_local (
    .clk, .we(l_we), .waddr(l_waddr), .wdata(rdata), .re(l_re), .raddr(l_raddr), .rdata(l_rdata)
  );

  // list load: returns go to local (index < LOCAL_DEPTH) or global buffer
  assign l_we    = (st == L_LOAD) && rvalid && (ret < CW'(LOCAL_DEPTH));
  assign l_waddr = $clog2(LOCAL_DEPTH)'(ret);
  assign g_we    = (st == L_LOAD) && rvalid && (ret >= CW'(LOCAL_DEPTH));
  assign g_waddr = GAW'(ret - CW'(LOCAL_DEPTH));
  assign g_wdata = rdata;

  // ---------------- key load into the sorter ----------------
  logic [CW-1:0] kidx;
  logic kl_v, kl_glob;
  logic [SW-1:0] kl_slot;
  gidx_t vals [NSORT];
  assign kidx    = base + CW'(kj);
  assign l_re    = (st == L_KEYLD) && (kj < m) && (kidx < CW'(LOCAL_DEPTH));
  assign l_raddr = $clog2(LOCAL_DEPTH)'(kidx);
  assign g_re    = (st == L_KEYLD) && (kj < m) && (kidx >= CW'(LOCAL_DEPTH));
  assign g_raddr = GAW'(kidx - CW'(LOCAL_DEPTH));

  logic [31:0] kl_word;
  assign kl_word = kl_glob ? g_rdata : l_rdata;

  // ---------------- sorter ----------------
  logic s_clear, s_go, s_ovalid, s_oready, s_empty;
  logic [SW-1:0] s_oslot;
  key_t s_okey;
  cf_subsorter #(.N(NSORT), .KW(KW)) u_sorter (
    .clk, .rst, .clear(s_clear), .ld_valid(kl_v), .ld_slot(kl_slot), .ld_key(kl_word[30:16]),
    .go(s_go), .o_valid(s_ovalid), .o_slot(s_oslot), .o_key(s_okey), .o_ready(s_oready), .empty(s_empty)
  );

  // ---------------- feature fetch into the Feature SRAM ----------------
  logic [SW:0]  fs_i, fr_i;       // slot being issued / returned
  logic [3:0]   fs_k, fr_k;       // word within the record
  logic [FEAT_WORDS-1:0][31:0] f_asm;
  logic f_we;
  logic [FEAT_WORDS*32-1:0] f_wdata, f_rdata;
  logic f_re;

  always_comb begin
    f_wdata = '0;
    for (int k = 0; k < FEAT_WORDS - 1; k++) f_wdata[32*(FEAT_WORDS-1-k) +: 32] = f_asm[k];
    f_wdata[31:0] = rdata;
  end
  assign f_we = (st == L_FETCH) && rvalid && (fr_k == 4'(FEAT_WORDS - 1));

  sram_1r1w #(.WIDTH(FEAT_WORDS*32), .DEPTH(NSORT)) u_feature_sram (
    .clk, .we(f_we), .waddr(SW'(fr_i)), .wdata(f_wdata), .re(f_re), .raddr(s_oslot), .rdata(f_rdata)
  );

  // memory read requests
  always_comb begin
    rreq = 1'b0; raddr = '0;
    if (st == L_LOAD && iss < n) begin
      rreq = 1'b1; raddr = list_addr + 32'(iss);
    end else if (st == L_FETCH && fs_i < m) begin
      rreq = 1'b1;
      raddr = FEAT_BASE + (32'(parity) << 24) + (32'(vals[SW'(fs_i)]) << 4) + 32'(fs_k);
    end
  end

  // ---------------- sorted buffer (one point) and rasterizer ----------------
  logic  fs_pend, sb_valid, r_gready, r_alldone, r_ostart, r_ovalid, r_olast;
  feat_t sb;
  logic [GWD-1:0] r_ogrp;
  logic  r_init;
  logic [15:0] org_x, org_y;

  assign s_go     = (st == L_SORT);
  assign s_oready = (st == L_SORT) && !sb_valid && !fs_pend;
  assign f_re     = s_ovalid && s_oready;

  rasterizer #(.TILE(TILE), .PIX_PAR(PIX_PAR)) u_rast (
    .clk, .rst, .init(r_init), .org_x, .org_y,
    .g_valid(sb_valid), .g_ready(r_gready), .g_feat(sb), .all_done(r_alldone),
    .out_start(r_ostart), .o_valid(r_ovalid), .o_grp(r_ogrp), .o_rgb(px_rgb), .o_last(r_olast),
    .n_pruned, .n_term
  );
  assign px_valid = r_ovalid;
  assign px_grp   = r_ogrp;
  assign px_tile  = TW'(t);
  assign r_ostart = (st == L_OUT);
  assign org_x    = 16'((32'(t) % TX) * TILE);
  assign org_y    = 16'((32'(t) / TX) * TILE);
  assign r_init   = (st == L_TILE) && (t < NT);
  assign g_acq    = used_global && (st != L_OUT) && (st != L_OUTW) && (st != L_IDLE) && (st != L_TILE);
  assign s_clear  = (st == L_TILE) || (st == L_SORT && r_alldone);

  logic chunk_done;
  assign chunk_done = s_empty && !sb_valid && !fs_pend && r_gready;

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= L_IDLE; done <= 1'b0; kl_v <= 1'b0; fs_pend <= 1'b0; sb_valid <= 1'b0;
      used_global <= 1'b0; t <= '0;
      n_tiles <= '0; n_early <= '0; n_global <= '0; n_chunked <= '0; n_stall <= '0; n_blended <= '0;
    end else begin
      done <= 1'b0;
      // key-load pipeline (buffer read -> sorter)
      kl_v <= 1'b0;
      if (l_re || g_re) begin
        kl_v <= 1'b1; kl_slot <= SW'(kj); kl_glob <= g_re; kj <= kj + 1'b1;
      end
      if (kl_v) vals[kl_slot] <= kl_word[15:0];
      // sorter -> Feature SRAM read -> sorted buffer -> rasterizer
      fs_pend <= f_re;
      if (fs_pend) begin sb <= feat_t'(f_rdata); sb_valid <= 1'b1; end
      if (sb_valid && r_gready) begin sb_valid <= 1'b0; n_blended <= n_blended + 1; end
      if (s_ovalid && !s_oready && st == L_SORT) n_stall <= n_stall + 1;

      case (st)
        L_IDLE: if (start) begin st <= L_TILE; t <= (TW+1)'(LANE_ID); end
        L_TILE: begin
          if (t >= NT) begin
            st <= L_IDLE; done <= 1'b1;
          end else begin
            n    <= (cnt_val > CW'(LOCAL_DEPTH + GLOBAL_DEPTH)) ? CW'(LOCAL_DEPTH + GLOBAL_DEPTH) : cnt_val;
            iss  <= '0; ret <= '0; base <= '0; early_flag <= 1'b0;
            used_global <= (cnt_val > CW'(LOCAL_DEPTH));
            st   <= (cnt_val > CW'(LOCAL_DEPTH)) ? L_ACQ : L_LOAD;
            n_tiles <= n_tiles + 1;
            if (cnt_val > CW'(LOCAL_DEPTH)) n_global <= n_global + 1;
            if (cnt_val > CW'(NSORT)) n_chunked <= n_chunked + 1;
          end
        end
        L_ACQ: if (g_gnt) st <= L_LOAD;
        L_LOAD: begin
          if (rreq && rgnt) iss <= iss + 1'b1;
          if (rvalid) ret <= ret + 1'b1;
          if (ret == n) begin
            if (n == 0) st <= L_OUT;
            else begin
              st <= L_KEYLD; kj <= '0;
              m  <= (n > CW'(NSORT)) ? (SW+1)'(NSORT) : (SW+1)'(n);
            end
          end
        end
        L_KEYLD: begin
          if (kj == m && !kl_v) begin
            st <= L_FETCH; fs_i <= '0; fs_k <= '0; fr_i <= '0; fr_k <= '0;
          end
        end
        L_FETCH: begin
          if (rreq && rgnt) begin
            if (fs_k == 4'(FEAT_WORDS - 1)) begin fs_k <= '0; fs_i <= fs_i + 1'b1; end
            else fs_k <= fs_k + 1'b1;
          end
          if (rvalid) begin
            f_asm[fr_k] <= rdata;
            if (fr_k == 4'(FEAT_WORDS - 1)) begin
              fr_k <= '0; fr_i <= fr_i + 1'b1;
              if (fr_i + 1'b1 == m) st <= L_SORT;
            end else fr_k <= fr_k + 1'b1;
          end
        end
        L_SORT: begin
          if (r_alldone) begin
            // every pixel finished: drop the rest of the tile
            sb_valid <= 1'b0;
            if (!s_empty || (base + CW'(m) < n)) early_flag <= 1'b1;
            if (r_gready && !fs_pend) begin
              st <= L_OUT;
              if (early_flag || !s_empty || (base + CW'(m) < n)) n_early <= n_early + 1;
            end
          end else if (chunk_done && !(s_ovalid)) begin
            if (base + CW'(m) < n) begin
              base <= base + CW'(m);
              m    <= (n - (base + CW'(m)) > CW'(NSORT)) ? (SW+1)'(NSORT) : (SW+1)'(n - (base + CW'(m)));
              kj   <= '0;
              st   <= L_KEYLD;
            end else begin
              st <= L_OUT;
            end
          end
        end
        L_OUT:  if (r_gready) st <= L_OUTW;
        L_OUTW: if (r_olast) begin st <= L_TILE; t <= t + (TW+1)'(NLANE); end
        default: st <= L_IDLE;
      endcase
    end
  end
  assign busy = (st != L_IDLE);

  logic unused;
  assign unused = ^{s_okey};
endmodule
