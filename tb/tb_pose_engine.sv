// tb_pose_engine: frames are run on a reduced pose tracking engine (two 4x4
// systolic arrays, two lightweight GPE arrays, Iter_T = 3). The NN buffer is
// filled with random operands; after each frame both arrays' products must
// equal A*B over the run_k operand pairs, computed in the testbench. A frame
// with refine must run exactly Iter_T rendering passes (and its rendered
// pixels must match a real-valued blend), a frame without refine none, and the
// frame without refine must finish within k + 2N + 4 cycles.
module tb_pose_engine;
  import ags_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned NUM_SA = 2, N = 4, NB_DEPTH = 16, LIGHT_ARR = 2, DEPTH = 16, ITER_T = 3;
  localparam int unsigned NBA = 4, AW = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic nb_we = 1'b0;
  logic [1:0] nb_bank = '0;
  logic [NBA-1:0] nb_addr = '0;
  logic [N*16-1:0] nb_wdata = '0;
  logic ld_we = 1'b0;
  logic [0:0] ld_sel = '0;
  logic [AW-1:0] ld_addr = '0;
  gid_t ld_id = '0;
  gfeat_t ld_feat = '0;
  logic [LIGHT_ARR-1:0][AW:0] list_len = '0;
  logic [LIGHT_ARR-1:0][23:0] tile_xy = '0;
  logic [15:0] thresh_alpha = ALPHA_THRESH_DEF;
  logic run_start = 1'b0, run_refine = 1'b0;
  logic [NBA:0] run_k = '0;
  logic [NBA-1:0] run_a_base = '0, run_b_base = '0;
  logic run_busy, run_done;
  logic [0:0] rd_sa = '0;
  logic [1:0] rd_row = '0;
  logic signed [N-1:0][31:0] rd_data;
  rgb_t [LIGHT_ARR-1:0][15:0] pix_color;
  logic [31:0] stat_frames, stat_refined, stat_iters;

  pose_engine #(.NUM_SA(NUM_SA), .N(N), .NB_DEPTH(NB_DEPTH), .LIGHT_ARR(LIGHT_ARR),
                .DEPTH(DEPTH), .ITER_T(ITER_T)) dut (.*);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [N*16-1:0] nbm [4][NB_DEPTH];

  initial begin
    gfeat_t fl [LIGHT_ARR][];
    int k, ab, bb, cyc, iters0;
    longint c;
    real cr, cg, cb, t, d;
    bit nc [];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < 4; b++)
      for (int a = 0; a < NB_DEPTH; a++) begin
        @(negedge clk);
        nb_we = 1'b1; nb_bank = 2'(b); nb_addr = NBA'(a);
        for (int e = 0; e < N; e++) nb_wdata[e*16 +: 16] = 16'($urandom_range(0, 600) - 300);
        nbm[b][a] = nb_wdata;
      end
    @(negedge clk);
    nb_we = 1'b0;
    // lightweight array lists
    for (int a = 0; a < LIGHT_ARR; a++) begin
      fl[a] = new[DEPTH];
      tile_xy[a] = {12'(8 * a), 12'(4)};
      for (int p = 0; p < DEPTH; p++) begin
        fl[a][p] = rand_feat(8 * a, 4, 4);
        @(negedge clk);
        ld_we = 1'b1; ld_sel = 1'(a); ld_addr = AW'(p); ld_id = gid_t'(p); ld_feat = fl[a][p];
      end
      list_len[a] = (AW+1)'(DEPTH);
    end
    @(negedge clk);
    ld_we = 1'b0;
    for (int f = 0; f < 12; f++) begin
      k = $urandom_range(1, NB_DEPTH - 4); ab = $urandom_range(0, 3); bb = $urandom_range(0, 3);
      iters0 = int'(stat_iters);
      run_start = 1'b1; run_refine = (f % 2 == 1); run_k = (NBA+1)'(k);
      run_a_base = NBA'(ab); run_b_base = NBA'(bb);
      @(negedge clk);
      run_start = 1'b0;
      cyc = 1;
      while (!run_done) begin @(negedge clk); cyc++; end
      if (!run_refine) begin
        checks++;
        if (cyc > k + 2 * N + 4) begin failures++; $display("frame %0d took %0d cycles for k=%0d", f, cyc, k); end
      end
      checks++;
      if (int'(stat_iters) - iters0 != (run_refine ? ITER_T : 0)) begin
        failures++; $display("frame %0d: %0d GS iterations", f, int'(stat_iters) - iters0);
      end
      for (int s = 0; s < NUM_SA; s++)
        for (int i = 0; i < N; i++) begin
          rd_sa = 1'(s); rd_row = 2'(i);
          #1;
          for (int j = 0; j < N; j++) begin
            c = 0;
            for (int kk = 0; kk < k; kk++)
              c += longint'($signed(nbm[2*s][(ab + kk) % NB_DEPTH][i*16 +: 16])) *
                   longint'($signed(nbm[2*s+1][(bb + kk) % NB_DEPTH][j*16 +: 16]));
            checks++;
            if (longint'($signed(rd_data[j])) != c) begin
              failures++; if (failures < 10) $display("frame %0d SA %0d C[%0d][%0d] = %0d expected %0d", f, s, i, j, $signed(rd_data[j]), c);
            end
          end
        end
      if (run_refine) begin
        for (int a = 0; a < LIGHT_ARR; a++)
          for (int g = 0; g < 16; g++) begin
            ref_render(fl[a], DEPTH, real'(8 * a + g % 4), real'(4 + g / 4), cr, cg, cb, t, nc);
            checks++;
            d = real'(pix_color[a][g].r) / 65536.0 - cr; if (d < 0.0) d = -d;
            if (d > 0.01) failures++;
          end
      end
      @(negedge clk);
    end
    checks++;
    if (stat_frames != 32'd12 || stat_refined != 32'd6) begin failures++; $display("frames %0d refined %0d", stat_frames, stat_refined); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
