// tb_gs_array: four GPE arrays are loaded through the shared port with
// different random lists and tiles and started together (and, in every other
// round, at different times). Each array's pixels are compared with a
// real-valued blend of its own list and tile; the merged contribution stream
// must deliver every (ID, count) record of every array exactly once, each
// array's records in list order, under random back-pressure.
module tb_gs_array;
  import ags_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned NARR = 4, DEPTH = 32, AW = 5, SW = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic ld_we = 1'b0;
  logic [SW-1:0] ld_sel = '0;
  logic [AW-1:0] ld_addr = '0;
  gid_t ld_id = '0;
  gfeat_t ld_feat = '0;
  logic [NARR-1:0] start_mask = '0;
  logic [NARR-1:0][AW:0] list_len = '0;
  logic [NARR-1:0][23:0] tile_xy = '0;
  logic [15:0] thresh_alpha = ALPHA_THRESH_DEF;
  logic assist_en = 1'b1, log_en = 1'b1;
  logic [NARR-1:0] busy_mask, done_mask;
  rgb_t [NARR-1:0][15:0] pix_color;
  logic [NARR-1:0][15:0][15:0] pix_trans;
  logic nc_valid, nc_ready = 1'b1;
  gid_t nc_id;
  logic [4:0] nc_num;
  logic [31:0] stat_hits, stat_assists;

  gs_array #(.NARR(NARR), .DEPTH(DEPTH)) dut (.*);

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // records seen: ID = {array, round, position}
  int seen [NARR][DEPTH];
  int last_pos [NARR];
  int order_err = 0;
  always @(posedge clk) begin
    if (rst_n && nc_valid && nc_ready) begin
      int a, p;
      a = int'(nc_id[19:16]); p = int'(nc_id[7:0]);
      if (a < NARR && p < DEPTH) begin
        seen[a][p]++;
        if (p <= last_pos[a]) order_err++;
        last_pos[a] = p;
      end
    end
  end
  always @(negedge clk) nc_ready <= ($urandom_range(0, 3) != 0);

  initial begin
    gfeat_t fl [NARR][];
    int n [NARR];
    int tx [NARR], ty [NARR];
    logic [NARR-1:0] fin;
    real cr, cg, cb, t, d;
    bit nc [];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 12; r++) begin
      for (int a = 0; a < NARR; a++) begin
        n[a] = $urandom_range(1, DEPTH);
        tx[a] = $urandom_range(0, 200) * 4; ty[a] = $urandom_range(0, 100) * 4;
        fl[a] = new[n[a]];
        last_pos[a] = -1;
        for (int p = 0; p < DEPTH; p++) seen[a][p] = 0;
        for (int p = 0; p < n[a]; p++) begin
          fl[a][p] = rand_feat(tx[a], ty[a], 4);
          @(negedge clk);
          ld_we = 1'b1; ld_sel = SW'(a); ld_addr = AW'(p);
          ld_id = {4'(a), 8'(r), 8'(p)}; ld_feat = fl[a][p];
        end
        list_len[a] = (AW+1)'(n[a]);
        tile_xy[a] = {12'(tx[a]), 12'(ty[a])};
      end
      @(negedge clk);
      ld_we = 1'b0;
      fin = '0;
      if (r % 2 == 0) begin
        start_mask = '1;
        @(negedge clk);
        start_mask = '0;
      end else begin
        for (int a = 0; a < NARR; a++) begin
          start_mask = NARR'(1) << a;
          @(negedge clk);
          start_mask = '0;
          repeat ($urandom_range(0, 20)) @(negedge clk);
        end
      end
      while (busy_mask != '0) @(negedge clk);
      repeat (2) @(negedge clk);
      for (int a = 0; a < NARR; a++) begin
        for (int g = 0; g < 16; g++) begin
          ref_render(fl[a], n[a], real'(tx[a] + g % 4), real'(ty[a] + g / 4), cr, cg, cb, t, nc);
          checks++;
          d = real'(pix_color[a][g].b) / 65536.0 - cb; if (d < 0.0) d = -d;
          if (d > 0.01) begin failures++; $display("round %0d array %0d pixel %0d: b %f expected %f", r, a, g, real'(pix_color[a][g].b) / 65536.0, cb); end
          checks++;
          d = real'(pix_trans[a][g]) / 65536.0 - t; if (d < 0.0) d = -d;
          if (d > 0.005) failures++;
        end
        for (int p = 0; p < n[a]; p++) begin
          checks++;
          if (seen[a][p] != 1) begin failures++; $display("round %0d array %0d pos %0d: %0d records", r, a, p, seen[a][p]); end
        end
      end
    end
    checks++;
    if (order_err != 0 || stat_hits == 0) begin failures++; $display("order errors %0d, hits %0d", order_err, stat_hits); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
