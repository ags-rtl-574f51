// tb_mapping_engine: a reduced mapping engine (2 GPE arrays, lists of 16,
// small logging/skipping tables, 4 update units, 4 comparison lanes) maps a
// sequence of key and non-key frames. The testbench holds the DRAM: Gaussian
// features (in-order fetch responses with random latency), and the
// {epoch, count} words used by the update unit and the skipping table.
//   * Every batch's pixels are compared with a real-valued blend of the
//     Gaussians the tile should render: the whole table on a key frame, on a
//     non-key frame only those whose count for the current epoch is not above
//     Thresh_N (computed here from the DRAM words).
//   * After a key frame each Gaussian's DRAM count must equal the number of
//     pixels, summed over the frame's tiles, for which its alpha was below
//     1/255 (up to the pixels rounding may decide, see tb_gpe_array).
//   * stat_skipped must equal the number of table entries above Thresh_N.
//   * Key and non-key frames, skipping, hot and cold logging, truncation of an
//     over-long table and alpha-buffer hits must all occur.
module tb_mapping_engine;
  import ags_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned NARR = 2, DEPTH = 16, UTW = 2, POOL = 48, NT = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic frame_start = 1'b0, key_frame = 1'b0;
  logic [19:0] n_tiles = 20'(NT);
  logic [15:0] thresh_alpha = ALPHA_THRESH_DEF;
  ncnum_t thresh_n = 12'd2;
  logic busy, batch_done, frame_done;
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
  logic [UTW-1:0] up_req_tag;
  logic up_rsp_valid = 1'b0;
  logic [UTW-1:0] up_rsp_tag = '0;
  logic [15:0] up_rsp_data = '0;
  logic sk_req_valid, sk_req_ready = 1'b1;
  gid_t sk_req_addr;
  logic sk_rsp_valid = 1'b0;
  logic [15:0] sk_rsp_data = '0;
  rgb_t [NARR-1:0][15:0] pix_color;
  logic [NARR-1:0] pix_valid;
  logic [3:0] epoch;
  logic [31:0] stat_key_frames, stat_nonkey_frames, stat_skipped, stat_rendered, stat_hits,
               stat_assists, stat_hot_upd, stat_cold_upd, stat_truncated;

  mapping_engine #(.NARR(NARR), .DEPTH(DEPTH), .LOG_HOT(16), .LOG_COLD(8), .SKIP_HOT(8),
                   .SKIP_COLD(8), .UPD_UNITS(4), .CMP_LANES(4)) dut (.*);

  initial begin : watchdog
    repeat (400000) @(posedge clk);
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
          up_rsp_valid <= 1'b1; up_rsp_tag <= UTW'(uq[k].tag); up_rsp_data <= words[uq[k].id]; uq.delete(k);
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

  // ---------------- frame content ----------------
  int tbl [NT][$];
  int txy [NT][2];
  int ref_cnt [POOL], amb [POOL];
  int exp_skip = 0;
  int batch = 0;
  bit cur_key;
  int n_pix_checked = 0;

  function automatic int cnt_of(int id);
    return (words[id][15:12] == epoch) ? int'(words[id][11:0]) : 0;
  endfunction

  // pixel check at every batch end
  always @(posedge clk) begin
    if (rst_n && batch_done) begin
      for (int a = 0; a < NARR; a++) begin
        int t;
        t = batch * NARR + a;
        if (t < NT) begin
          gfeat_t fl [];
          int n;
          real cr, cg, cb, tr, d;
          bit nc [];
          n = 0;
          fl = new[DEPTH];
          foreach (tbl[t][k]) begin
            if (n >= DEPTH) break;
            if (!cur_key && cnt_of(tbl[t][k]) > int'(thresh_n)) continue;
            fl[n] = feats[tbl[t][k]]; n++;
          end
          checks++;
          if (pix_valid[a] != (n != 0)) begin failures++; $display("batch %0d array %0d: pix_valid %b for %0d Gaussians", batch, a, pix_valid[a], n); end
          if (n != 0) begin
            for (int g = 0; g < 16; g++) begin
              ref_render(fl, n, real'(txy[t][0] + g % 4), real'(txy[t][1] + g / 4), cr, cg, cb, tr, nc);
              checks++;
              d = real'(pix_color[a][g].g) / 65536.0 - cg; if (d < 0.0) d = -d;
              if (d > 0.01) begin
                failures++;
                if (failures < 10) $display("batch %0d tile %0d pixel %0d: g %f expected %f", batch, t, g, real'(pix_color[a][g].g) / 65536.0, cg);
              end
              n_pix_checked++;
            end
          end
        end
      end
      batch++;
    end
  end

  task automatic run_frame(input bit key);
    int ntot;
    cur_key = key;
    batch = 0;
    // tables: IDs drawn from the pool without repeats, random depth order
    for (int t = 0; t < NT; t++) begin
      int len;
      tbl[t].delete();
      len = (key && t == 1) ? DEPTH + 3 : $urandom_range(4, DEPTH);
      while (tbl[t].size() < len) begin
        int id; bit dup;
        id = $urandom_range(0, POOL - 1); dup = 0;
        foreach (tbl[t][k]) if (tbl[t][k] == id) dup = 1;
        if (!dup) tbl[t].push_back(id);
      end
      txy[t][0] = (t % 3) * 4; txy[t][1] = (t / 3) * 4;
    end
    @(negedge clk);
    frame_start = 1'b1; key_frame = key;
    @(negedge clk);
    frame_start = 1'b0;
    // expected skips use the counts as they are now (non-key frames write nothing)
    if (!key) foreach (tbl[t]) foreach (tbl[t][k]) if (cnt_of(tbl[t][k]) > int'(thresh_n)) exp_skip++;
    for (int t = 0; t < NT; t++) begin
      for (int k = 0; k < tbl[t].size(); k++) begin
        tbl_valid = 1'b1; tbl_id = gid_t'(tbl[t][k]); tbl_last = (k == tbl[t].size() - 1);
        tbl_tile_xy = {12'(txy[t][0]), 12'(txy[t][1])};
        #1;
        while (!tbl_ready) begin @(negedge clk); #1; end
        @(negedge clk);
        tbl_valid = 1'b0;
        if ($urandom_range(0, 5) == 0) @(negedge clk);
      end
    end
    tbl_valid = 1'b0;
    while (!frame_done) @(negedge clk);
    @(negedge clk);
    if (key) begin
      // reference contribution counts
      for (int i = 0; i < POOL; i++) begin ref_cnt[i] = 0; amb[i] = 0; end
      for (int t = 0; t < NT; t++) begin
        gfeat_t fl [];
        int n;
        n = (tbl[t].size() > DEPTH) ? DEPTH : tbl[t].size();
        fl = new[n];
        for (int k = 0; k < n; k++) fl[k] = feats[tbl[t][k]];
        for (int g = 0; g < 16; g++) begin
          real px, py, cr, cg, cb, tr, a;
          bit nc [];
          px = real'(txy[t][0] + g % 4); py = real'(txy[t][1] + g / 4);
          ref_render(fl, n, px, py, cr, cg, cb, tr, nc);
          for (int k = 0; k < n; k++) begin
            a = ref_alpha(fl[k], px, py);
            if (nc[k]) ref_cnt[tbl[t][k]]++;
            if ((a > 0.7 / 255.0 && a < 1.3 / 255.0) || tr < 1.5e-4) amb[tbl[t][k]]++;
          end
        end
      end
      for (int i = 0; i < POOL; i++) begin
        checks++;
        if (cnt_of(i) > ref_cnt[i] + amb[i] || cnt_of(i) < ref_cnt[i] - amb[i]) begin
          failures++; $display("id %0d: DRAM count %0d expected %0d (+-%0d)", i, cnt_of(i), ref_cnt[i], amb[i]);
        end
      end
    end
  endtask

  initial begin
    for (int i = 0; i < POOL; i++) begin
      feats[i] = rand_feat(4, 2, 10);
      // wide, nearly opaque Gaussians so that pixels terminate early
      feats[i].opac = 16'($urandom_range(50000, 65535));
      feats[i].ca = 16'($urandom_range(100, 600));
      feats[i].cc = 16'($urandom_range(100, 600));
      words[i] = 16'h0000;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_frame(1'b1);
    run_frame(1'b0);
    run_frame(1'b0);
    run_frame(1'b1);
    run_frame(1'b0);
    checks++;
    if (stat_skipped != 32'(exp_skip)) begin failures++; $display("skipped %0d expected %0d", stat_skipped, exp_skip); end
    checks++;
    if (stat_key_frames != 2 || stat_nonkey_frames != 3 || exp_skip == 0 || stat_hot_upd == 0 ||
        stat_cold_upd == 0 || stat_truncated == 0 || stat_hits == 0 || n_pix_checked == 0) begin
      failures++;
      $display("mechanisms: key %0d nonkey %0d skipped %0d hot %0d cold %0d truncated %0d hits %0d",
               stat_key_frames, stat_nonkey_frames, exp_skip, stat_hot_upd, stat_cold_upd, stat_truncated, stat_hits);
    end
    $display("assists %0d", stat_assists);
    $display("skipped %0d, rendered %0d, hot %0d cold %0d updates, truncated %0d, pixels checked %0d",
             stat_skipped, stat_rendered, stat_hot_upd, stat_cold_upd, stat_truncated, n_pix_checked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
