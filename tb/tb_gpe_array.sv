// tb_gpe_array: random depth-ordered Gaussian lists for 4x4 tiles are rendered
// twice, once with the GPE scheduler's assistance off and once on.
//   * Both runs must give bit-identical pixel colours, transmittances and
//     contribution counts: assistance may change only the timing.
//   * Colours and transmittances are compared with a real-valued front-to-back
//     blend per pixel (tolerance 0.01 / 0.005).
//   * The contribution stream must list every Gaussian ID in list order with the
//     number of pixels for which its alpha was below 1/255, compared with the
//     reference up to pixels whose reference alpha lies within 30 % of the
//     threshold or that terminate near 1e-4 (rounding may decide those).
//   * Over the run, alpha-buffer hits and assistant writes must occur and the
//     assisted runs must not be slower in total.
module tb_gpe_array;
  import ags_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned DEPTH = 64, AW = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic ld_we = 1'b0;
  logic [AW-1:0] ld_addr = '0;
  gid_t ld_id = '0;
  gfeat_t ld_feat = '0;
  logic start = 1'b0;
  logic [AW:0] list_len = '0;
  logic [11:0] tile_x = '0, tile_y = '0;
  logic [15:0] thresh_alpha = ALPHA_THRESH_DEF;
  logic assist_en = 1'b0, log_en = 1'b1;
  logic busy, done;
  rgb_t [15:0] pix_color;
  logic [15:0][15:0] pix_trans;
  logic nc_valid, nc_ready = 1'b1;
  gid_t nc_id;
  logic [4:0] nc_num;
  logic [31:0] stat_hits, stat_assists, stat_cycles;

  gpe_array #(.DEPTH(DEPTH)) dut (.*);

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  gfeat_t fl [];
  gid_t   ids [DEPTH];
  int     got_num [DEPTH];
  gid_t   got_id  [DEPTH];
  int     n_got;

  // collect the contribution stream (random back-pressure) until done
  task automatic run_tile(input bit asst, output int cyc);
    n_got = 0;
    @(negedge clk);
    start = 1'b1; assist_en = asst;
    @(negedge clk);
    start = 1'b0;
    while (!done) begin
      nc_ready = ($urandom_range(0, 3) != 0);
      #1;
      if (nc_valid && nc_ready) begin
        if (n_got < DEPTH) begin got_id[n_got] = nc_id; got_num[n_got] = int'(nc_num); end
        n_got++;
      end
      @(negedge clk);
    end
    nc_ready = 1'b1;
    cyc = int'(stat_cycles);
  endtask

  int tot_off = 0, tot_on = 0, tot_hits = 0, tot_asst = 0, n_term = 0;
  int hits0, asst0;

  initial begin
    rgb_t   c_off [16];
    logic [15:0] t_off [16];
    int     num_off [DEPTH];
    int     n, cyc_off, cyc_on, tx, ty;
    real    cr, cg, cb, t, d, a;
    bit     nc [];
    int     ref_num [DEPTH];
    int     amb [DEPTH];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int tile = 0; tile < 40; tile++) begin
      n  = $urandom_range(1, DEPTH);
      tx = $urandom_range(0, 100) * 4; ty = $urandom_range(0, 60) * 4;
      fl = new[n];
      for (int i = 0; i < n; i++) begin
        fl[i] = rand_feat(tx, ty, (tile % 2 == 0) ? 3 : 8);
        ids[i] = gid_t'($urandom);
        @(negedge clk);
        ld_we = 1'b1; ld_addr = AW'(i); ld_id = ids[i]; ld_feat = fl[i];
      end
      @(negedge clk);
      ld_we = 1'b0;
      list_len = (AW+1)'(n); tile_x = 12'(tx); tile_y = 12'(ty);
      run_tile(1'b0, cyc_off);
      for (int g = 0; g < 16; g++) begin c_off[g] = pix_color[g]; t_off[g] = pix_trans[g]; end
      for (int i = 0; i < n; i++) num_off[i] = got_num[i];
      checks++;
      if (n_got != n) begin failures++; $display("tile %0d: %0d records for %0d Gaussians", tile, n_got, n); end
      for (int i = 0; i < n && i < n_got; i++) begin
        checks++;
        if (got_id[i] !== ids[i]) failures++;
      end
      hits0 = int'(stat_hits); asst0 = int'(stat_assists);
      run_tile(1'b1, cyc_on);
      tot_off += cyc_off; tot_on += cyc_on;
      tot_hits += int'(stat_hits) - hits0; tot_asst += int'(stat_assists) - asst0;
      // identical results with and without assistance
      for (int g = 0; g < 16; g++) begin
        checks++;
        if (pix_color[g] !== c_off[g] || pix_trans[g] !== t_off[g]) begin
          failures++; $display("tile %0d pixel %0d differs with assistance", tile, g);
        end
      end
      checks++;
      if (n_got != n) failures++;
      for (int i = 0; i < n && i < n_got; i++) begin
        checks++;
        if (got_num[i] != num_off[i]) begin failures++; $display("tile %0d pos %0d count differs with assistance", tile, i); end
      end
      // reference
      for (int i = 0; i < n; i++) begin ref_num[i] = 0; amb[i] = 0; end
      for (int g = 0; g < 16; g++) begin
        real px, py;
        px = real'(tx + g % 4); py = real'(ty + g / 4);
        ref_render(fl, n, px, py, cr, cg, cb, t, nc);
        if (t < 1.5e-4) n_term++;
        for (int i = 0; i < n; i++) begin
          a = ref_alpha(fl[i], px, py);
          if (nc[i]) ref_num[i]++;
          if (a > 0.7 / 255.0 && a < 1.3 / 255.0) amb[i]++;
        end
        if (t < 1.5e-4) for (int i = 0; i < n; i++) amb[i]++;   // termination point uncertain
        checks++;
        d = real'(pix_color[g].r) / 65536.0 - cr; if (d < 0.0) d = -d;
        if (d > 0.01) begin failures++; $display("tile %0d pixel %0d: r %f expected %f", tile, g, real'(pix_color[g].r) / 65536.0, cr); end
        checks++;
        d = real'(pix_color[g].g) / 65536.0 - cg; if (d < 0.0) d = -d;
        if (d > 0.01) failures++;
        checks++;
        d = real'(pix_trans[g]) / 65536.0 - t; if (d < 0.0) d = -d;
        if (d > 0.005) begin failures++; $display("tile %0d pixel %0d: T %f expected %f", tile, g, real'(pix_trans[g]) / 65536.0, t); end
      end
      for (int i = 0; i < n; i++) begin
        checks++;
        if (got_num[i] > ref_num[i] + amb[i] || got_num[i] < ref_num[i] - amb[i]) begin
          failures++; $display("tile %0d pos %0d: count %0d expected %0d (+-%0d)", tile, i, got_num[i], ref_num[i], amb[i]);
        end
      end
    end
    checks++;
    if (tot_hits == 0 || tot_asst == 0 || tot_on > tot_off || n_term == 0) begin
      failures++; $display("mechanisms: hits %0d assists %0d cycles %0d/%0d term %0d", tot_hits, tot_asst, tot_on, tot_off, n_term);
    end
    $display("cycles without / with assistance %0d / %0d, hits %0d, assists %0d, terminated pixels %0d",
             tot_off, tot_on, tot_hits, tot_asst, n_term);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
