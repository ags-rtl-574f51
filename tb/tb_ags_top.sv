// tb_ags_top: end-to-end run of a reduced AGS (8 SAD lanes, two 4x4 systolic
// arrays, 2 lightweight and 2 mapping GPE arrays with lists of 16, Iter_T = 2)
// over a sequence of frames. For every frame the testbench plays the CODEC
// (two passes of minimum SADs whose level sets the covisibility), the host
// (Gaussian tables of NT tiles per frame) and the DRAM (features and
// {epoch, count} words).
// Checked against values computed here:
//   * each FC decision (refine / key frame) from real-valued covisibility;
//   * Iter_T lightweight passes for each refined frame, none otherwise;
//   * the key-frame epoch seen by the mapping engine, i.e. frames reach
//     mapping in order with their own key flag;
//   * the mapped pixels of every batch (real-valued blend of the Gaussians the
//     tile must render: all on key frames, on non-key frames those whose count
//     is not above Thresh_N);
//   * the GEMM result of the last tracked frame.
// Mechanisms counted, each must happen: refine and no-refine frames, key and
// non-key frames, skipped Gaussians, alpha-buffer hits and assistant writes,
// hot and cold logging updates, tracking overlapping mapping, a full frame
// queue, and SAD back-pressure (decision waiting for the pose engine).
module tb_ags_top;
  import ags_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned MAP_ARR = 2, LIGHT_ARR = 2, SA_N = 4, NB_DEPTH = 16, DEPTH = 16, ITER_T = 2;
  localparam int unsigned NBA = 4, AW = 4, POOL = 48, NT = 3, NF = 10;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic [6:0] thresh_t_pct = 7'd90, thresh_m_pct = 7'd50;
  logic [15:0] thresh_alpha = ALPHA_THRESH_DEF;
  ncnum_t thresh_n = 12'd2;
  logic [19:0] map_n_tiles = 20'(NT);
  logic [NBA:0] trk_k = 5'd6;
  logic [NBA-1:0] trk_a_base = 4'd1, trk_b_base = 4'd3;
  logic sad_valid = 1'b0, sad_ready, sad_last = 1'b0, sad_ref_key = 1'b0;
  logic [7:0][13:0] sad_data = '0;
  logic [7:0] sad_mask = '0;
  logic nb_we = 1'b0;
  logic [1:0] nb_bank = '0;
  logic [NBA-1:0] nb_addr = '0;
  logic [SA_N*16-1:0] nb_wdata = '0;
  logic lt_ld_we = 1'b0;
  logic [0:0] lt_ld_sel = '0;
  logic [AW-1:0] lt_ld_addr = '0;
  gid_t lt_ld_id = '0;
  gfeat_t lt_ld_feat = '0;
  logic [LIGHT_ARR-1:0][AW:0] lt_list_len = '0;
  logic [LIGHT_ARR-1:0][23:0] lt_tile_xy = '0;
  logic [0:0] rd_sa = '0;
  logic [1:0] rd_row = '0;
  logic signed [SA_N-1:0][31:0] rd_data;
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
  logic [1:0] up_req_tag;
  logic up_rsp_valid = 1'b0;
  logic [1:0] up_rsp_tag = '0;
  logic [15:0] up_rsp_data = '0;
  logic sk_req_valid, sk_req_ready = 1'b1;
  gid_t sk_req_addr;
  logic sk_rsp_valid = 1'b0;
  logic [15:0] sk_rsp_data = '0;
  rgb_t [MAP_ARR-1:0][15:0] map_color;
  logic [MAP_ARR-1:0] map_valid;
  logic map_batch_done, map_frame_done, trk_frame_done;
  rgb_t [LIGHT_ARR-1:0][15:0] trk_color;
  fc_dec_t last_dec;
  logic [31:0] fc_sum_prev, fc_sum_key;
  logic [3:0] map_epoch;
  logic [31:0] stat_trk_frames, stat_refined, stat_iters, stat_key_frames, stat_nonkey_frames,
               stat_skipped, stat_rendered, stat_hits, stat_assists, stat_hot_upd, stat_cold_upd,
               stat_truncated, stat_overlap, stat_queue_full;

  ags_top #(.FC_LANES(8), .NUM_SA(2), .SA_N(SA_N), .NB_DEPTH(NB_DEPTH), .LIGHT_ARR(LIGHT_ARR),
            .MAP_ARR(MAP_ARR), .DEPTH(DEPTH), .ITER_T(ITER_T), .LOG_HOT(16), .LOG_COLD(8),
            .SKIP_HOT(8), .SKIP_COLD(8), .UPD_UNITS(4), .CMP_LANES(4)) dut (.*);

  initial begin : watchdog
    repeat (1000000) @(posedge clk);
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
  int sk_due = -1, sk_id = 0;
  always @(posedge clk) begin
    now++;
    fr_rsp_valid <= 1'b0;
    up_rsp_valid <= 1'b0;
    sk_rsp_valid <= 1'b0;
    if (rst_n) begin
      if (fq.size() > 0 && fq[0].due <= now) begin
        fr_rsp_valid <= 1'b1; fr_rsp_feat <= feats[fq[0].id]; void'(fq.pop_front());
      end
      if (fr_req_valid && fr_req_ready) fq.push_back('{due: now + $urandom_range(2, 8), id: int'(fr_req_id)});
      if (uq.size() > 0) begin
        int k;
        k = $urandom_range(0, uq.size() - 1);
        if (uq[k].due <= now) begin
          up_rsp_valid <= 1'b1; up_rsp_tag <= 2'(uq[k].tag); up_rsp_data <= words[uq[k].id]; uq.delete(k);
        end
      end
      if (up_req_valid && up_req_ready) begin
        if (up_req_we) words[up_req_addr] = up_req_wdata;
        else uq.push_back('{due: now + $urandom_range(2, 10), tag: int'(up_req_tag), id: int'(up_req_addr)});
      end
      if (sk_due >= 0 && now >= sk_due) begin sk_rsp_valid <= 1'b1; sk_rsp_data <= words[sk_id]; sk_due = -1; end
      if (sk_req_valid && sk_req_ready) begin sk_id = int'(sk_req_addr); sk_due = now + $urandom_range(1, 6); end
      fr_req_ready <= ($urandom_range(0, 4) != 0);
      up_req_ready <= ($urandom_range(0, 3) != 0);
      sk_req_ready <= ($urandom_range(0, 3) != 0);
    end
  end

  // ---------------- frames ----------------
  // SAD level per frame and pass: 0 = very similar ... 5 = different
  int lvl_prev [NF], lvl_key [NF];
  bit exp_ref [NF], exp_key [NF];
  int tbl [NF][NT][$];
  int txy [NT][2];

  // mechanisms
  int n_stall = 0, n_ref = 0, n_noref = 0;

  always @(posedge clk) if (rst_n && !sad_ready) n_stall++;

  // ---- mapping monitor: epoch per mapped frame, pixel check per batch ----
  int mf = 0, mbatch = 0, nkey_seen = 0, n_pix = 0;
  always @(posedge clk) begin
    if (rst_n && map_batch_done) begin
      for (int a = 0; a < MAP_ARR; a++) begin
        int t;
        t = mbatch * MAP_ARR + a;
        if (t < NT) begin
          gfeat_t fl [];
          int n;
          real cr, cg, cb, tr, d;
          bit nc [];
          n = 0;
          fl = new[DEPTH];
          foreach (tbl[mf][t][k]) begin
            int id, c;
            if (n >= DEPTH) break;
            id = tbl[mf][t][k];
            c = (words[id][15:12] == map_epoch) ? int'(words[id][11:0]) : 0;
            if (!exp_key[mf] && c > int'(thresh_n)) continue;
            fl[n] = feats[id]; n++;
          end
          checks++;
          if (map_valid[a] != (n != 0)) begin failures++; $display("frame %0d tile %0d: valid %b for %0d", mf, t, map_valid[a], n); end
          if (n != 0)
            for (int g = 0; g < 16; g++) begin
              ref_render(fl, n, real'(txy[t][0] + g % 4), real'(txy[t][1] + g / 4), cr, cg, cb, tr, nc);
              checks++;
              d = real'(map_color[a][g].r) / 65536.0 - cr; if (d < 0.0) d = -d;
              if (d > 0.01) begin failures++; if (failures < 10) $display("frame %0d tile %0d pixel %0d: r %f expected %f", mf, t, g, real'(map_color[a][g].r) / 65536.0, cr); end
              n_pix++;
            end
        end
      end
      mbatch++;
    end
    if (rst_n && map_frame_done) begin
      if (exp_key[mf]) nkey_seen++;
      checks++;
      if (int'(map_epoch) != nkey_seen % 16) begin failures++; $display("mapped frame %0d: epoch %0d expected %0d", mf, map_epoch, nkey_seen); end
      mf++;
      mbatch = 0;
    end
  end

  // ---- decisions as they leave the FC detection engine ----
  int df = 0;
  always @(posedge clk) begin
    if (rst_n && dut.dec_valid) begin
      checks++;
      if (dut.dec.refine !== exp_ref[df] || dut.dec.key_frame !== exp_key[df]) begin
        failures++; $display("frame %0d: decision %b%b expected %b%b", df, dut.dec.refine, dut.dec.key_frame, exp_ref[df], exp_key[df]);
      end
      df++;
    end
  end

  // ---- tracking monitor: iterations per frame ----
  int tf = 0, it0 = 0;
  always @(posedge clk) begin
    if (rst_n && trk_frame_done) begin
      checks++;
      if (int'(stat_iters) - it0 != (exp_ref[tf] ? ITER_T : 0)) begin failures++; $display("frame %0d: %0d iterations", tf, int'(stat_iters) - it0); end
      it0 = int'(stat_iters);
      tf++;
    end
  end

  // ---- CODEC: SAD passes ----
  task automatic send_pass(input bit key, input int level, output longint sum, output int mbs);
    int beats;
    sum = 0; mbs = 0;
    beats = $urandom_range(4, 12);
    for (int b = 0; b < beats; b++) begin
      sad_valid = 1'b1; sad_ref_key = key; sad_last = (b == beats - 1);
      sad_mask = 8'hFF;
      for (int l = 0; l < 8; l++)
        sad_data[l] = (level >= 7) ? 14'($urandom_range(10000, 16320)) : 14'($urandom_range(0, 16320 * (level + 1) / 8));
      #1;
      while (!sad_ready) begin @(negedge clk); #1; end
      for (int l = 0; l < 8; l++) begin sum += sad_data[l]; mbs++; end
      @(negedge clk);
    end
    sad_valid = 1'b0; sad_last = 1'b0;
  endtask

  logic [SA_N*16-1:0] nbm [4][NB_DEPTH];

  initial begin
    longint sp, sk;
    int mp, mk;
    for (int i = 0; i < POOL; i++) begin
      feats[i] = rand_feat(4, 2, 10);
      feats[i].opac = 16'($urandom_range(50000, 65535));
      feats[i].ca = 16'($urandom_range(100, 600));
      feats[i].cc = 16'($urandom_range(100, 600));
      words[i] = 16'h0000;
    end
    for (int t = 0; t < NT; t++) begin txy[t][0] = (t % 3) * 4; txy[t][1] = (t / 3) * 4; end
    for (int f = 0; f < NF; f++) begin
      lvl_prev[f] = (f % 3 == 1) ? 5 : 0;          // refine on frames 1, 4, 7
      lvl_key[f]  = (f == 0 || f == 5) ? 7 : 0;    // key frames 0 and 5
      for (int t = 0; t < NT; t++) begin
        int len;
        len = (f == 0 && t == 1) ? DEPTH + 2 : $urandom_range(4, DEPTH);
        while (tbl[f][t].size() < len) begin
          int id; bit dup;
          id = $urandom_range(0, POOL - 1); dup = 0;
          foreach (tbl[f][t][k]) if (tbl[f][t][k] == id) dup = 1;
          if (!dup) tbl[f][t].push_back(id);
        end
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // NN buffer and lightweight GS array contents
    for (int b = 0; b < 4; b++)
      for (int a = 0; a < NB_DEPTH; a++) begin
        nb_we = 1'b1; nb_bank = 2'(b); nb_addr = NBA'(a);
        for (int e = 0; e < SA_N; e++) nb_wdata[e*16 +: 16] = 16'($urandom_range(0, 600) - 300);
        nbm[b][a] = nb_wdata;
        @(negedge clk);
      end
    nb_we = 1'b0;
    for (int a = 0; a < LIGHT_ARR; a++) begin
      for (int p = 0; p < DEPTH; p++) begin
        lt_ld_we = 1'b1; lt_ld_sel = 1'(a); lt_ld_addr = AW'(p); lt_ld_id = gid_t'(p);
        lt_ld_feat = feats[p];
        @(negedge clk);
      end
      lt_list_len[a] = (AW+1)'(DEPTH);
      lt_tile_xy[a] = {12'(4 * a), 12'd0};
    end
    lt_ld_we = 1'b0;
    // frames
    fork
      begin
        for (int f = 0; f < NF; f++) begin
          real cp, ck;
          send_pass(1'b0, lvl_prev[f], sp, mp);
          send_pass(1'b1, lvl_key[f], sk, mk);
          cp = 1.0 - real'(sp) / (real'(mp) * 64.0 * 255.0);
          ck = 1.0 - real'(sk) / (real'(mk) * 64.0 * 255.0);
          exp_ref[f] = !(cp * 100.0 > 90.0);
          exp_key[f] = !(ck * 100.0 > 50.0);
          if (exp_ref[f]) n_ref++; else n_noref++;
        end
      end
      begin
        // host: Gaussian tables of every frame, in order
        for (int f = 0; f < NF; f++)
          for (int t = 0; t < NT; t++)
            for (int k = 0; k < tbl[f][t].size(); k++) begin
              tbl_valid = 1'b1; tbl_id = gid_t'(tbl[f][t][k]); tbl_last = (k == tbl[f][t].size() - 1);
              tbl_tile_xy = {12'(txy[t][0]), 12'(txy[t][1])};
              #1;
              while (!tbl_ready) begin @(negedge clk); #1; end
              @(negedge clk);
            end
        tbl_valid = 1'b0;
      end
    join
    while (mf < NF) begin
      @(negedge clk);
      if (now % 50000 == 0) $display("progress: tracked %0d mapped %0d", tf, mf);
    end
    repeat (4) @(negedge clk);
    // GEMM of the last tracked frame
    for (int s = 0; s < 2; s++)
      for (int i = 0; i < SA_N; i++) begin
        rd_sa = 1'(s); rd_row = 2'(i);
        #1;
        for (int j = 0; j < SA_N; j++) begin
          longint c;
          c = 0;
          for (int kk = 0; kk < int'(trk_k); kk++)
            c += longint'($signed(nbm[2*s][int'(trk_a_base) + kk][i*16 +: 16])) *
                 longint'($signed(nbm[2*s+1][int'(trk_b_base) + kk][j*16 +: 16]));
          checks++;
          if (longint'($signed(rd_data[j])) != c) failures++;
        end
      end
    checks++;
    if (tf != NF || stat_trk_frames != 32'(NF) || stat_refined != 32'(n_ref) ||
        stat_key_frames != 32'd2 || stat_nonkey_frames != 32'(NF - 2)) begin
      failures++; $display("frames: tracked %0d refined %0d key %0d nonkey %0d", stat_trk_frames, stat_refined, stat_key_frames, stat_nonkey_frames);
    end
    $display("mechanisms: refine %0d no-refine %0d key %0d non-key %0d skipped %0d hits %0d assists %0d hot %0d cold %0d",
             n_ref, n_noref, stat_key_frames, stat_nonkey_frames, stat_skipped, stat_hits, stat_assists, stat_hot_upd, stat_cold_upd);
    $display("            overlap %0d queue-full %0d sad-stall %0d truncated %0d pixels checked %0d",
             stat_overlap, stat_queue_full, n_stall, stat_truncated, n_pix);
    checks++;
    if (n_ref == 0 || n_noref == 0 || stat_skipped == 0 || stat_hits == 0 || stat_assists == 0 ||
        stat_hot_upd == 0 || stat_cold_upd == 0 || stat_overlap == 0 || stat_queue_full == 0 ||
        n_stall == 0 || stat_truncated == 0 || n_pix == 0) begin
      failures++; $display("a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
