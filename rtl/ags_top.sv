// ags_top: the AGS accelerator, FC detection engine, pose tracking engine and
// mapping engine, with tracking of one frame overlapping mapping of the
// previous one.
//
// Per frame:
//   1. The video CODEC has written the frame's minimum SADs to DRAM. They are
//      streamed into the FC detection engine twice, against the previous frame
//      and against the latest key frame; it decides refine (covisibility with the
//      previous frame not above Thresh_T) and key_frame (covisibility with the
//      key frame not above Thresh_M).
//   2. The pose tracking engine runs the coarse estimation on its systolic
//      arrays and, if refine, Iter_T passes of its lightweight GS array.
//   3. The frame's key-frame flag enters a two-entry queue; the mapping engine
//      takes it and runs full mapping (key frame) or selective mapping.
// Because tracking no longer depends on the Gaussians being mapped, step 1-2
// of frame t+1 run while the mapping engine works on frame t; stat_overlap
// counts the cycles in which both engines are busy.
//
// The CODEC, the DRAM and the host are outside: their channels are ports.
// sad_ready is low while a decision waits for the pose engine, and the pose
// engine waits while the mapping queue is full (back-pressure end to end).
// The GEMM operands (trk_k, trk_a_base, trk_b_base), the lightweight array's
// tiles and the number of map tiles per frame are host settings.
module ags_top
  import ags_pkg::*;
#(
  parameter int unsigned FC_LANES  = 8,
  parameter int unsigned NUM_SA    = 2,
  parameter int unsigned SA_N      = 32,
  parameter int unsigned NB_DEPTH  = 128,
  parameter int unsigned LIGHT_ARR = 8,
  parameter int unsigned MAP_ARR   = 16,
  parameter int unsigned DEPTH     = 204,
  parameter int unsigned ITER_T    = 20,
  parameter int unsigned LOG_HOT   = 512,
  parameter int unsigned LOG_COLD  = 512,
  parameter int unsigned SKIP_HOT  = 512,
  parameter int unsigned SKIP_COLD = 512,
  parameter int unsigned UPD_UNITS = 16,
  parameter int unsigned CMP_LANES = 16,
  parameter int unsigned AW  = $clog2(DEPTH),
  parameter int unsigned NBA = $clog2(NB_DEPTH),
  parameter int unsigned LSW = (LIGHT_ARR > 1) ? $clog2(LIGHT_ARR) : 1,
  parameter int unsigned SSW = (NUM_SA > 1) ? $clog2(NUM_SA) : 1,
  parameter int unsigned UTW = (UPD_UNITS > 1) ? $clog2(UPD_UNITS) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // settings
  input  logic [6:0]                    thresh_t_pct,
  input  logic [6:0]                    thresh_m_pct,
  input  logic [15:0]                   thresh_alpha,
  input  ncnum_t                        thresh_n,
  input  logic [19:0]                   map_n_tiles,
  input  logic [NBA:0]                  trk_k,
  input  logic [NBA-1:0]                trk_a_base,
  input  logic [NBA-1:0]                trk_b_base,
  // minimum SADs from the CODEC (via DRAM)
  input  logic                          sad_valid,
  output logic                          sad_ready,
  input  logic [FC_LANES-1:0][13:0]     sad_data,
  input  logic [FC_LANES-1:0]           sad_mask,
  input  logic                          sad_last,
  input  logic                          sad_ref_key,
  // pose tracking engine: NN buffer fill, lightweight GS array lists
  input  logic                          nb_we,
  input  logic [$clog2(2*NUM_SA)-1:0]   nb_bank,
  input  logic [NBA-1:0]                nb_addr,
  input  logic [SA_N*16-1:0]            nb_wdata,
  input  logic                          lt_ld_we,
  input  logic [LSW-1:0]                lt_ld_sel,
  input  logic [AW-1:0]                 lt_ld_addr,
  input  gid_t                          lt_ld_id,
  input  gfeat_t                        lt_ld_feat,
  input  logic [LIGHT_ARR-1:0][AW:0]    lt_list_len,
  input  logic [LIGHT_ARR-1:0][23:0]    lt_tile_xy,
  input  logic [SSW-1:0]                rd_sa,
  input  logic [$clog2(SA_N)-1:0]       rd_row,
  output logic signed [SA_N-1:0][31:0]  rd_data,
  // mapping engine: Gaussian tables, features, DRAM channels
  input  logic                          tbl_valid,
  output logic                          tbl_ready,
  input  gid_t                          tbl_id,
  input  logic                          tbl_last,
  input  logic [23:0]                   tbl_tile_xy,
  output logic                          fr_req_valid,
  input  logic                          fr_req_ready,
  output gid_t                          fr_req_id,
  input  logic                          fr_rsp_valid,
  input  gfeat_t                        fr_rsp_feat,
  output logic                          up_req_valid,
  input  logic                          up_req_ready,
  output logic                          up_req_we,
  output gid_t                          up_req_addr,
  output logic [15:0]                   up_req_wdata,
  output logic [UTW-1:0]                up_req_tag,
  input  logic                          up_rsp_valid,
  input  logic [UTW-1:0]                up_rsp_tag,
  input  logic [15:0]                   up_rsp_data,
  output logic                          sk_req_valid,
  input  logic                          sk_req_ready,
  output gid_t                          sk_req_addr,
  input  logic                          sk_rsp_valid,
  input  logic [15:0]                   sk_rsp_data,
  // results and status
  output rgb_t [MAP_ARR-1:0][15:0]      map_color,
  output logic [MAP_ARR-1:0]            map_valid,
  output logic                          map_batch_done,
  output logic                          map_frame_done,
  output logic                          trk_frame_done,
  output rgb_t [LIGHT_ARR-1:0][15:0]    trk_color,
  output fc_dec_t                       last_dec,
  output logic [31:0]                   fc_sum_prev,
  output logic [31:0]                   fc_sum_key,
  output logic [3:0]                    map_epoch,
  output logic [31:0]                   stat_trk_frames,
  output logic [31:0]                   stat_refined,
  output logic [31:0]                   stat_iters,
  output logic [31:0]                   stat_key_frames,
  output logic [31:0]                   stat_nonkey_frames,
  output logic [31:0]                   stat_skipped,
  output logic [31:0]                   stat_rendered,
  output logic [31:0]                   stat_hits,
  output logic [31:0]                   stat_assists,
  output logic [31:0]                   stat_hot_upd,
  output logic [31:0]                   stat_cold_upd,
  output logic [31:0]                   stat_truncated,
  output logic [31:0]                   stat_overlap,
  output logic [31:0]                   stat_queue_full
);

  // ---------------- FC detection engine ----------------
  logic        dec_valid;
  fc_dec_t     dec;

  fc_detect #(.LANES(FC_LANES), .SAD_W(14)) u_fc (
    .clk, .rst_n, .thresh_t_pct, .thresh_m_pct,
    .sad_valid(sad_valid && sad_ready), .sad_data, .sad_mask, .sad_last, .sad_ref_key,
    .dec_valid, .dec, .sum_prev(fc_sum_prev), .sum_key(fc_sum_key)
  );

  // decision waiting for the pose engine
  logic    dec_hold;
  fc_dec_t dec_q;

  // ---------------- pose tracking engine ----------------
  logic trk_start, trk_busy, trk_done;
  logic [31:0] trk_frames;

  pose_engine #(.NUM_SA(NUM_SA), .N(SA_N), .NB_DEPTH(NB_DEPTH), .LIGHT_ARR(LIGHT_ARR),
                .DEPTH(DEPTH), .ITER_T(ITER_T)) u_pose (
    .clk, .rst_n,
    .nb_we, .nb_bank, .nb_addr, .nb_wdata,
    .ld_we(lt_ld_we), .ld_sel(lt_ld_sel), .ld_addr(lt_ld_addr), .ld_id(lt_ld_id),
    .ld_feat(lt_ld_feat), .list_len(lt_list_len), .tile_xy(lt_tile_xy), .thresh_alpha,
    .run_start(trk_start), .run_refine(dec_q.refine), .run_k(trk_k),
    .run_a_base(trk_a_base), .run_b_base(trk_b_base),
    .run_busy(trk_busy), .run_done(trk_done),
    .rd_sa, .rd_row, .rd_data,
    .pix_color(trk_color),
    .stat_frames(trk_frames), .stat_refined, .stat_iters
  );

  // ---------------- frame queue between tracking and mapping ----------------
  logic [1:0] q_key;       // key-frame flags, entry 0 is the head
  logic [1:0] q_cnt;
  logic       trk_wait_q;  // tracked frame waiting for a queue slot
  logic       trk_key;     // its key-frame flag
  logic       q_push, q_pop;

  // ---------------- mapping engine ----------------
  logic map_busy, map_start;

  mapping_engine #(.NARR(MAP_ARR), .DEPTH(DEPTH), .LOG_HOT(LOG_HOT), .LOG_COLD(LOG_COLD),
                   .SKIP_HOT(SKIP_HOT), .SKIP_COLD(SKIP_COLD),
                   .UPD_UNITS(UPD_UNITS), .CMP_LANES(CMP_LANES)) u_map (
    .clk, .rst_n,
    .frame_start(map_start), .key_frame(q_key[0]), .n_tiles(map_n_tiles),
    .thresh_alpha, .thresh_n,
    .busy(map_busy), .batch_done(map_batch_done), .frame_done(map_frame_done),
    .tbl_valid, .tbl_ready, .tbl_id, .tbl_last, .tbl_tile_xy,
    .fr_req_valid, .fr_req_ready, .fr_req_id, .fr_rsp_valid, .fr_rsp_feat,
    .up_req_valid, .up_req_ready, .up_req_we, .up_req_addr, .up_req_wdata, .up_req_tag,
    .up_rsp_valid, .up_rsp_tag, .up_rsp_data,
    .sk_req_valid, .sk_req_ready, .sk_req_addr, .sk_rsp_valid, .sk_rsp_data,
    .pix_color(map_color), .pix_valid(map_valid), .epoch(map_epoch),
    .stat_key_frames, .stat_nonkey_frames, .stat_skipped, .stat_rendered,
    .stat_hits, .stat_assists, .stat_hot_upd, .stat_cold_upd, .stat_truncated
  );

  assign sad_ready      = !dec_hold;
  assign trk_start      = dec_hold && !trk_busy && !trk_wait_q && !trk_done;
  assign trk_frame_done = trk_done;
  assign q_push         = trk_wait_q && (q_cnt < 2'd2);
  assign map_start      = (q_cnt != 2'd0) && !map_busy;
  assign q_pop          = map_start;
  assign stat_trk_frames = trk_frames;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dec_hold <= 1'b0; dec_q <= '0; last_dec <= '0;
      q_key <= '0; q_cnt <= '0; trk_wait_q <= 1'b0; trk_key <= 1'b0;
      stat_overlap <= '0; stat_queue_full <= '0;
    end else begin
      if (dec_valid) begin
        dec_hold <= 1'b1;
        dec_q    <= dec;
        last_dec <= dec;
      end else if (trk_start) begin
        dec_hold <= 1'b0;
      end
      if (trk_start) trk_key <= dec_q.key_frame;
      if (trk_done) trk_wait_q <= 1'b1;
      else if (q_push) trk_wait_q <= 1'b0;

      // two-entry queue
      case ({q_push, q_pop})
        2'b10: begin q_key[q_cnt[0]] <= trk_key; q_cnt <= q_cnt + 2'd1; end
        2'b01: begin q_key <= {1'b0, q_key[1]}; q_cnt <= q_cnt - 2'd1; end
        2'b11: begin
          if (q_cnt == 2'd1) q_key[0] <= trk_key;
          else               q_key    <= {trk_key, q_key[1]};
        end
        default: ;
      endcase

      if (trk_busy && map_busy) stat_overlap <= stat_overlap + 32'd1;
      if (trk_wait_q && q_cnt == 2'd2) stat_queue_full <= stat_queue_full + 32'd1;
    end
  end

endmodule
