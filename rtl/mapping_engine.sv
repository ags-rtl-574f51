// mapping_engine: the mapping engine, full mapping for key frames and
// selective mapping for non-key frames.
//
// A frame's tiles arrive as Gaussian tables (IDs in depth order, one table per
// tile, tbl_last on its final ID, tbl_tile_xy giving the tile's top-left pixel).
// Tiles are rendered in batches of NARR, one per GPE array of the GS array.
//   Key frame (full mapping): every ID of a table is profiled by the GS logging
//   table and its features are fetched from DRAM into the GPE array. After
//   rendering, each array streams its per-Gaussian non-contributory numbers
//   into the logging table; a tile end flushes the logging cache and the batch
//   end the logging buffer, both through the update unit into DRAM.
//   Non-key frame (selective mapping): the table goes through the GS skipping
//   table, whose comparison unit drops the Gaussians recorded as
//   non-contributory for more than Thresh_N pixels; only the remaining IDs have
//   their features fetched and are rendered.
// Starting a key frame advances the 4-bit key-frame epoch stored with the DRAM
// counts (see update_unit) and empties the skipping table's on-chip copies.
//
// Interfaces: feature fetch is a request channel (fr_req_*) with in-order
// responses (fr_rsp_*); the update unit and the skipping table each have their
// own DRAM channel. frame_start (with key_frame, n_tiles) starts a frame when
// idle; batch_done pulses when a batch of tiles has been rendered (pixel
// results on pix_color valid in that cycle and until the next batch starts),
// frame_done when the whole frame, its logging included, has finished.
// This design's choices: batches of NARR tiles, one table entry accepted per
// cycle, tiles with more than DEPTH Gaussians are truncated to DEPTH; the
// gradient pass and the Gaussian update of training are not built.
module mapping_engine
  import ags_pkg::*;
#(
  parameter int unsigned NARR      = 16,
  parameter int unsigned DEPTH     = 204,
  parameter int unsigned LOG_HOT   = 512,
  parameter int unsigned LOG_COLD  = 512,
  parameter int unsigned SKIP_HOT  = 512,
  parameter int unsigned SKIP_COLD = 512,
  parameter int unsigned UPD_UNITS = 16,
  parameter int unsigned CMP_LANES = 16,
  parameter int unsigned AW  = $clog2(DEPTH),
  parameter int unsigned SW  = (NARR > 1) ? $clog2(NARR) : 1,
  parameter int unsigned UTW = (UPD_UNITS > 1) ? $clog2(UPD_UNITS) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // frame command
  input  logic                        frame_start,
  input  logic                        key_frame,
  input  logic [19:0]                 n_tiles,
  input  logic [15:0]                 thresh_alpha,
  input  ncnum_t                      thresh_n,
  output logic                        busy,
  output logic                        batch_done,
  output logic                        frame_done,
  // Gaussian tables
  input  logic                        tbl_valid,
  output logic                        tbl_ready,
  input  gid_t                        tbl_id,
  input  logic                        tbl_last,
  input  logic [23:0]                 tbl_tile_xy,
  // Gaussian feature fetch
  output logic                        fr_req_valid,
  input  logic                        fr_req_ready,
  output gid_t                        fr_req_id,
  input  logic                        fr_rsp_valid,
  input  gfeat_t                      fr_rsp_feat,
  // update unit DRAM channel
  output logic                        up_req_valid,
  input  logic                        up_req_ready,
  output logic                        up_req_we,
  output gid_t                        up_req_addr,
  output logic [15:0]                 up_req_wdata,
  output logic [UTW-1:0]              up_req_tag,
  input  logic                        up_rsp_valid,
  input  logic [UTW-1:0]              up_rsp_tag,
  input  logic [15:0]                 up_rsp_data,
  // skipping table DRAM channel
  output logic                        sk_req_valid,
  input  logic                        sk_req_ready,
  output gid_t                        sk_req_addr,
  input  logic                        sk_rsp_valid,
  input  logic [15:0]                 sk_rsp_data,
  // results
  output rgb_t [NARR-1:0][15:0]       pix_color,
  output logic [NARR-1:0]             pix_valid,     // arrays rendered in this batch
  output logic [3:0]                  epoch,
  // statistics
  output logic [31:0]                 stat_key_frames,
  output logic [31:0]                 stat_nonkey_frames,
  output logic [31:0]                 stat_skipped,
  output logic [31:0]                 stat_rendered,
  output logic [31:0]                 stat_hits,
  output logic [31:0]                 stat_assists,
  output logic [31:0]                 stat_hot_upd,
  output logic [31:0]                 stat_cold_upd,
  output logic [31:0]                 stat_truncated
);

  typedef enum logic [2:0] {M_IDLE, M_LOAD, M_START, M_WAIT, M_BEND, M_FLUSH} st_e;
  st_e st;

  logic          key_q;
  logic [19:0]   tiles_left;
  logic [SW:0]   arr;           // array being loaded
  logic [AW:0]   req_cnt, rsp_cnt;
  logic          last_seen;     // the tile's last request has been issued
  logic [NARR-1:0][AW:0]  list_len;
  logic [NARR-1:0][23:0]  tile_xy;
  logic [NARR-1:0]        started, pend;
  logic          first_ent;
  logic          te_pend;
  logic [SW:0]   te_cnt;        // tile ends not yet given to the logging table
  gid_t          fr_id_q;
  gid_t [DEPTH-1:0] req_ids;

  // ---------------- GS array ----------------
  logic [NARR-1:0] gs_start, gs_busy, gs_done;
  logic [NARR-1:0][15:0][15:0] pix_trans;
  logic            nc_valid, nc_ready;
  gid_t            nc_id;
  logic [4:0]      nc_num;
  logic            ld_we;

  gs_array #(.NARR(NARR), .DEPTH(DEPTH)) u_gs (
    .clk, .rst_n,
    .ld_we, .ld_sel(SW'(arr)), .ld_addr(AW'(rsp_cnt)), .ld_id(fr_id_q), .ld_feat(fr_rsp_feat),
    .start_mask(gs_start), .list_len, .tile_xy, .thresh_alpha,
    .assist_en(1'b1), .log_en(key_q),
    .busy_mask(gs_busy), .done_mask(gs_done),
    .pix_color, .pix_trans,
    .nc_valid, .nc_ready, .nc_id, .nc_num,
    .stat_hits, .stat_assists
  );

  // IDs of the outstanding feature requests, in order
  assign fr_id_q = req_ids[AW'(rsp_cnt)];

  // ---------------- logging path ----------------
  logic   lg_ready, lt_idle, flush_busy, tile_end, batch_end;
  logic   lu_valid, lu_ready, upd_idle;
  ncrec_t lu_rec;
  logic   prof_valid;

  gs_logging_table #(.HOT_ENTRIES(LOG_HOT), .COLD_ENTRIES(LOG_COLD)) u_log (
    .clk, .rst_n,
    .prof_valid, .prof_id(tbl_id),
    .lg_valid(nc_valid), .lg_ready, .lg_id(nc_id), .lg_num(nc_num),
    .tile_end, .batch_end, .flush_busy, .lt_idle,
    .up_valid(lu_valid), .up_ready(lu_ready), .up_rec(lu_rec),
    .stat_hot_upd, .stat_cold_upd
  );
  assign nc_ready = lg_ready;

  logic [31:0] upd_merges;
  update_unit #(.UNITS(UPD_UNITS)) u_upd (
    .clk, .rst_n, .epoch,
    .in_valid(lu_valid), .in_ready(lu_ready), .in_rec(lu_rec),
    .mem_req_valid(up_req_valid), .mem_req_ready(up_req_ready), .mem_req_we(up_req_we),
    .mem_req_addr(up_req_addr), .mem_req_wdata(up_req_wdata), .mem_req_tag(up_req_tag),
    .mem_rsp_valid(up_rsp_valid), .mem_rsp_tag(up_rsp_tag), .mem_rsp_data(up_rsp_data),
    .idle(upd_idle), .stat_merges(upd_merges)
  );

  // ---------------- skipping path ----------------
  logic sk_tb_valid, sk_tb_ready, sk_out_valid, sk_out_ready, sk_out_last, sk_out_empty;
  gid_t sk_out_id;
  logic sk_inval;
  logic [31:0] sk_kept, sk_reads, sk_over;

  gs_skipping_table #(.DEPTH(DEPTH), .LANES(CMP_LANES),
                      .HOT_ENTRIES(SKIP_HOT), .COLD_ENTRIES(SKIP_COLD)) u_skip (
    .clk, .rst_n, .inval(sk_inval), .epoch, .thresh(thresh_n),
    .tb_valid(sk_tb_valid), .tb_ready(sk_tb_ready), .tb_id(tbl_id), .tb_last(tbl_last),
    .rd_req_valid(sk_req_valid), .rd_req_ready(sk_req_ready), .rd_req_addr(sk_req_addr),
    .rd_rsp_valid(sk_rsp_valid), .rd_rsp_data(sk_rsp_data),
    .out_valid(sk_out_valid), .out_ready(sk_out_ready), .out_id(sk_out_id),
    .out_last(sk_out_last), .out_empty(sk_out_empty),
    .stat_skipped, .stat_kept(sk_kept), .stat_mem_reads(sk_reads), .stat_overflow(sk_over)
  );

  // ---------------- table / fetch steering ----------------
  logic loading, room;
  assign loading = (st == M_LOAD) && !last_seen;
  assign room    = req_cnt < (AW+1)'(DEPTH);

  always_comb begin
    tbl_ready    = 1'b0;
    sk_tb_valid  = 1'b0;
    sk_out_ready = 1'b0;
    fr_req_valid = 1'b0;
    fr_req_id    = tbl_id;
    prof_valid   = 1'b0;
    if (loading) begin
      if (key_q) begin
        // full mapping: each table entry is profiled and fetched
        // (held while the logging table flushes, so that no ID misses profiling)
        fr_req_valid = tbl_valid && room && lt_idle && !tile_end;
        tbl_ready    = (fr_req_ready || !room) && lt_idle && !tile_end;
        prof_valid   = tbl_valid && tbl_ready;
      end else begin
        // selective mapping: table -> skipping table -> fetch
        sk_tb_valid  = tbl_valid;
        tbl_ready    = sk_tb_ready;
        fr_req_valid = sk_out_valid && room;
        fr_req_id    = sk_out_id;
        sk_out_ready = fr_req_ready || !room;
      end
    end
  end

  assign ld_we    = (st == M_LOAD) && fr_rsp_valid;
  assign gs_start = (st == M_START && list_len[SW'(arr)] != '0) ? (NARR'(1) << SW'(arr)) : '0;
  assign busy     = (st != M_IDLE);
  assign te_pend  = (te_cnt != '0);
  assign sk_inval = (st == M_IDLE) && frame_start && key_frame;

  // logging table commands
  assign tile_end  = key_q && te_pend && lt_idle;
  assign batch_end = key_q && (st == M_BEND) && lt_idle && !te_pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= M_IDLE; key_q <= 1'b0; tiles_left <= '0; arr <= '0;
      req_cnt <= '0; rsp_cnt <= '0; last_seen <= 1'b0; list_len <= '0; tile_xy <= '0;
      started <= '0; pend <= '0; first_ent <= 1'b1; te_cnt <= '0;
      req_ids <= '0; epoch <= '0; batch_done <= 1'b0; frame_done <= 1'b0; pix_valid <= '0;
      stat_key_frames <= '0; stat_nonkey_frames <= '0; stat_rendered <= '0; stat_truncated <= '0;
    end else begin
      batch_done <= 1'b0;
      frame_done <= 1'b0;

      // tile ends of key frames are forwarded to the logging table one by one
      te_cnt <= te_cnt + (SW+1)'(key_q ? $countones(gs_done) : 0) - (SW+1)'(tile_end);

      // arrays finish while later ones are still loading
      pend <= pend & ~gs_done;

      case (st)
        M_IDLE: if (frame_start) begin
          key_q      <= key_frame;
          tiles_left <= n_tiles;
          arr        <= '0;
          started    <= '0;
          list_len   <= '0;
          pix_valid  <= '0;
          if (key_frame) begin
            epoch           <= epoch + 4'd1;
            stat_key_frames <= stat_key_frames + 32'd1;
          end else begin
            stat_nonkey_frames <= stat_nonkey_frames + 32'd1;
          end
          if (n_tiles != '0) begin
            st        <= M_LOAD;
            req_cnt   <= '0; rsp_cnt <= '0; last_seen <= 1'b0; first_ent <= 1'b1;
          end else frame_done <= 1'b1;
        end
        M_LOAD: begin
          // requests
          if (fr_req_valid && fr_req_ready) begin
            req_ids[AW'(req_cnt)] <= fr_req_id;
            req_cnt               <= req_cnt + 1'b1;
          end
          if (loading && tbl_valid && tbl_ready && first_ent) begin
            tile_xy[SW'(arr)] <= tbl_tile_xy;
            first_ent         <= 1'b0;
          end
          if (loading && tbl_valid && tbl_ready && tbl_last && key_q) last_seen <= 1'b1;
          if (loading && !key_q && sk_out_valid && sk_out_ready && sk_out_last) last_seen <= 1'b1;
          if (loading && !key_q && sk_out_empty) last_seen <= 1'b1;
          if (loading && ((key_q && tbl_valid && tbl_ready && !room) ||
                          (!key_q && sk_out_valid && sk_out_ready && !room)))
            stat_truncated <= stat_truncated + 32'd1;
          // responses
          if (fr_rsp_valid) rsp_cnt <= rsp_cnt + 1'b1;
          if (last_seen && rsp_cnt == req_cnt && !fr_rsp_valid) begin
            list_len[SW'(arr)] <= req_cnt;
            st                 <= M_START;
          end
        end
        M_START: begin
          if (list_len[SW'(arr)] != '0) begin
            started[SW'(arr)] <= 1'b1;
            pend[SW'(arr)]    <= 1'b1;
            stat_rendered     <= stat_rendered + 32'(list_len[SW'(arr)]);
          end
          tiles_left <= tiles_left - 20'd1;
          if (tiles_left == 20'd1 || arr == (SW+1)'(NARR - 1)) begin
            st <= M_WAIT;
          end else begin
            arr       <= arr + 1'b1;
            st        <= M_LOAD;
            req_cnt   <= '0; rsp_cnt <= '0; last_seen <= 1'b0; first_ent <= 1'b1;
          end
        end
        M_WAIT: begin
          if ((pend & ~gs_done) == '0) begin
            batch_done <= 1'b1;
            pix_valid  <= started;
            st         <= key_q ? M_BEND : M_FLUSH;
          end
        end
        M_BEND: if (batch_end) st <= M_FLUSH;
        M_FLUSH: if (!key_q || (lt_idle && !flush_busy && !lu_valid && upd_idle && !te_pend)) begin
          if (tiles_left == '0) begin
            st         <= M_IDLE;
            frame_done <= 1'b1;
          end else begin
            arr       <= '0;
            started   <= '0;
            list_len  <= '0;
            st        <= M_LOAD;
            req_cnt   <= '0; rsp_cnt <= '0; last_seen <= 1'b0; first_ent <= 1'b1;
          end
        end
        default: st <= M_IDLE;
      endcase
    end
  end

endmodule
