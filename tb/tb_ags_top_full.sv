// tb_ags_top_full: one complete frame through AGS at its default (AGS-Edge)
// sizes: 8 SAD lanes, two 32x32 systolic arrays with the 32 KB NN buffer,
// 8 lightweight and 16 mapping 4x4 GPE arrays with 204-entry lists, Iter_T = 20,
// 512-entry logging and skipping tables, 16 update units and 16 comparison
// lanes. The frame has low covisibility with both the previous and the key
// frame, so it is refined and mapped as a key frame:
//   * the FC decision must be refine = 1, key_frame = 1;
//   * tracking must run one GEMM (checked against A*B computed here) and 20
//     lightweight rendering passes;
//   * mapping renders 16 tiles in one batch; every pixel is compared with a
//     real-valued blend, and the DRAM counts left by the logging path with the
//     reference non-contributory counts (tolerance as in tb_gpe_array).
module tb_ags_top_full;
  import ags_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned NT = 16, POOL = 64, LLEN = 8, TLEN = 24;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic [6:0] thresh_t_pct = 7'd90, thresh_m_pct = 7'd50;
  logic [15:0] thresh_alpha = ALPHA_THRESH_DEF;
  ncnum_t thresh_n = 12'd2;
  logic [19:0] map_n_tiles = 20'(NT);
  logic [7:0] trk_k = 8'd40;
  logic [6:0] trk_a_base = 7'd3, trk_b_base = 7'd50;
  logic sad_valid = 1'b0, sad_ready, sad_last = 1'b0, sad_ref_key = 1'b0;
  logic [7:0][13:0] sad_data = '0;
  logic [7:0] sad_mask = '0;
  logic nb_we = 1'b0;
  logic [1:0] nb_bank = '0;
  logic [6:0] nb_addr = '0;
  logic [511:0] nb_wdata = '0;
  logic lt_ld_we = 1'b0;
  logic [2:0] lt_ld_sel = '0;
  logic [7:0] lt_ld_addr = '0;
  gid_t lt_ld_id = '0;
  gfeat_t lt_ld_feat = '0;
  logic [7:0][8:0] lt_list_len = '0;
  logic [7:0][23:0] lt_tile_xy = '0;
  logic [0:0] rd_sa = '0;
  logic [4:0] rd_row = '0;
  logic signed [31:0][31:0] rd_data;
  logic tbl_valid = 1'b0, tbl_ready, tbl_last = 1'b0;
  gid_t tbl_id = '0;
  logic [23:0] tbl_tile_xy = '0;
  logic fr_req_valid, fr_req_ready = 1'b1;
  gid_t fr_req_id;
  logic fr_rsp_valid = 1'b0;
  gfeat_t fr_rsp_feat = '0;
  logic up_req_valid, up_req_ready = 1'b1, up_req_we;
  gid_t up_req_addr;
  logic [15:0] up_req_wdata;
  logic [3:0] up_req_tag;
  logic up_rsp_valid = 1'b0;
  logic [3:0] up_rsp_tag = '0;
  logic [15:0] up_rsp_data = '0;
  logic sk_req_valid, sk_req_ready = 1'b1;
  gid_t sk_req_addr;
  logic sk_rsp_valid = 1'b0;
  logic [15:0] sk_rsp_data = '0;
  rgb_t [15:0][15:0] map_color;
  logic [15:0] map_valid;
  logic map_batch_done, map_frame_done, trk_frame_done;
  rgb_t [7:0][15:0] trk_color;
  fc_dec_t last_dec;
  logic [31:0] fc_sum_prev, fc_sum_key;
  logic [3:0] map_epoch;
  logic [31:0] stat_trk_frames, stat_refined, stat_iters, stat_key_frames, stat_nonkey_frames,
               stat_skipped, stat_rendered, stat_hits, stat_assists, stat_hot_upd, stat_cold_upd,
               stat_truncated, stat_overlap, stat_queue_full;

  ags_top dut (.*);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- DRAM model ----------------
  gfeat_t feats [POOL];
  logic [15:0] words [POOL];
  int now = 0;
  typedef struct { int due; int id; } fq_t;
  fq_t fq [$];
  typedef struct { int due; int tag; int id; } uq_t;
  uq_t uq [$];
  always @(posedge clk) begin
    now++;
    fr_rsp_valid <= 1'b0;
    up_rsp_valid <= 1'b0;
    if (rst_n) begin
      if (fq.size() > 0 && fq[0].due <= now) begin
        fr_rsp_valid <= 1'b1; fr_rsp_feat <= feats[fq[0].id]; void'(fq.pop_front());
      end
      if (fr_req_valid && fr_req_ready) fq.push_back('{due: now + 6, id: int'(fr_req_id)});
      if (uq.size() > 0 && uq[0].due <= now) begin
        up_rsp_valid <= 1'b1; up_rsp_tag <= 4'(uq[0].tag); up_rsp_data <= words[uq[0].id]; void'(uq.pop_front());
      end
      if (up_req_valid && up_req_ready) begin
        if (up_req_we) words[up_req_addr] = up_req_wdata;
        else uq.push_back('{due: now + 8, tag: int'(up_req_tag), id: int'(up_req_addr)});
      end
    end
  end

  logic [511:0] nbm [4][128];
  int tbl [NT][$];
  int txy [NT][2];

  initial begin
    int n_pix_bad;
    for (int i = 0; i < POOL; i++) begin
      feats[i] = rand_feat(8, 4, 16);
      feats[i].opac = 16'($urandom_range(40000, 65535));
      feats[i].ca = 16'($urandom_range(100, 800));
      feats[i].cc = 16'($urandom_range(100, 800));
      words[i] = 16'h0000;
    end
    for (int t = 0; t < NT; t++) begin
      txy[t][0] = (t % 4) * 4; txy[t][1] = (t / 4) * 4;
      while (tbl[t].size() < TLEN) begin
        int id; bit dup;
        id = $urandom_range(0, POOL - 1); dup = 0;
        foreach (tbl[t][k]) if (tbl[t][k] == id) dup = 1;
        if (!dup) tbl[t].push_back(id);
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < 4; b++)
      for (int a = 0; a < 128; a++) begin
        nb_we = 1'b1; nb_bank = 2'(b); nb_addr = 7'(a);
        for (int e = 0; e < 32; e++) nb_wdata[e*16 +: 16] = 16'($urandom_range(0, 600) - 300);
        nbm[b][a] = nb_wdata;
        @(negedge clk);
      end
    nb_we = 1'b0;
    for (int a = 0; a < 8; a++) begin
      for (int p = 0; p < LLEN; p++) begin
        lt_ld_we = 1'b1; lt_ld_sel = 3'(a); lt_ld_addr = 8'(p); lt_ld_id = gid_t'(p); lt_ld_feat = feats[p + a];
        @(negedge clk);
      end
      lt_list_len[a] = 9'(LLEN);
      lt_tile_xy[a] = {12'(4 * a), 12'd0};
    end
    lt_ld_we = 1'b0;
    // SADs: 64 macro-blocks per pass, covisibility about 30 %
    for (int pass = 0; pass < 2; pass++)
      for (int b = 0; b < 8; b++) begin
        sad_valid = 1'b1; sad_ref_key = 1'(pass); sad_last = (b == 7); sad_mask = 8'hFF;
        for (int l = 0; l < 8; l++) sad_data[l] = 14'($urandom_range(9000, 14000));
        #1;
        while (!sad_ready) begin @(negedge clk); #1; end
        @(negedge clk);
      end
    sad_valid = 1'b0; sad_last = 1'b0;
    // Gaussian tables of the 16 tiles
    for (int t = 0; t < NT; t++)
      for (int k = 0; k < TLEN; k++) begin
        tbl_valid = 1'b1; tbl_id = gid_t'(tbl[t][k]); tbl_last = (k == TLEN - 1);
        tbl_tile_xy = {12'(txy[t][0]), 12'(txy[t][1])};
        #1;
        while (!tbl_ready) begin @(negedge clk); #1; end
        @(negedge clk);
      end
    tbl_valid = 1'b0;
    while (stat_trk_frames == 0 || !dut.u_map.lt_idle || dut.u_map.busy) @(negedge clk);
    repeat (4) @(negedge clk);
    checks++;
    if (last_dec.refine !== 1'b1 || last_dec.key_frame !== 1'b1) begin failures++; $display("decision %b", last_dec); end
    checks++;
    if (stat_iters != 32'd20 || stat_key_frames != 32'd1) begin failures++; $display("iterations %0d key frames %0d", stat_iters, stat_key_frames); end
    // GEMM
    for (int s = 0; s < 2; s++)
      for (int i = 0; i < 32; i += 5) begin
        rd_sa = 1'(s); rd_row = 5'(i);
        #1;
        for (int j = 0; j < 32; j++) begin
          longint c;
          c = 0;
          for (int kk = 0; kk < int'(trk_k); kk++)
            c += longint'($signed(nbm[2*s][int'(trk_a_base) + kk][i*16 +: 16])) *
                 longint'($signed(nbm[2*s+1][int'(trk_b_base) + kk][j*16 +: 16]));
          checks++;
          if (longint'($signed(rd_data[j])) != c) failures++;
        end
      end
    // mapped pixels and DRAM counts
    begin
      int ref_cnt [POOL], amb [POOL];
      for (int i = 0; i < POOL; i++) begin ref_cnt[i] = 0; amb[i] = 0; end
      n_pix_bad = 0;
      for (int t = 0; t < NT; t++) begin
        gfeat_t fl [];
        fl = new[TLEN];
        for (int k = 0; k < TLEN; k++) fl[k] = feats[tbl[t][k]];
        for (int g = 0; g < 16; g++) begin
          real px, py, cr, cg, cb, tr, a, d;
          bit nc [];
          px = real'(txy[t][0] + g % 4); py = real'(txy[t][1] + g / 4);
          ref_render(fl, TLEN, px, py, cr, cg, cb, tr, nc);
          checks++;
          d = real'(map_color[t][g].g) / 65536.0 - cg; if (d < 0.0) d = -d;
          if (d > 0.01) begin failures++; n_pix_bad++; end
          for (int k = 0; k < TLEN; k++) begin
            a = ref_alpha(fl[k], px, py);
            if (nc[k]) ref_cnt[tbl[t][k]]++;
            if ((a > 0.7 / 255.0 && a < 1.3 / 255.0) || tr < 1.5e-4) amb[tbl[t][k]]++;
          end
        end
      end
      for (int i = 0; i < POOL; i++) begin
        int c;
        c = (words[i][15:12] == map_epoch) ? int'(words[i][11:0]) : 0;
        checks++;
        if (c > ref_cnt[i] + amb[i] || c < ref_cnt[i] - amb[i]) begin
          failures++; $display("id %0d: DRAM count %0d expected %0d (+-%0d)", i, c, ref_cnt[i], amb[i]);
        end
      end
    end
    $display("pixels off %0d; hits %0d assists %0d hot %0d cold %0d; %0d cycles",
             n_pix_bad, stat_hits, stat_assists, stat_hot_upd, stat_cold_upd, now);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
