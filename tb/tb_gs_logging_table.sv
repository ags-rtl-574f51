// tb_gs_logging_table: batches of tiles are profiled and then logged with
// random non-contributory numbers from a pool of IDs larger than the reduced
// tables, so that cache conflicts force evictions. Checked:
//   * after every tile_end flush, each cold Gaussian's records add up to the
//     numbers logged for it so far (nothing lost, nothing duplicated);
//   * a hot Gaussian (in two or more tables of the batch and owner of its
//     buffer slot, worked out by the testbench) sends nothing before the batch
//     ends and exactly one record, with its whole batch total, after it;
//   * no zero record is ever sent; hot updates, cold updates and evictions all
//     happen.
module tb_gs_logging_table;
  import ags_pkg::*;
  localparam int unsigned HOT = 16, COLD = 16, POOL = 96;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic prof_valid = 1'b0;
  gid_t prof_id = '0;
  logic lg_valid = 1'b0;
  logic lg_ready;
  gid_t lg_id = '0;
  logic [4:0] lg_num = '0;
  logic tile_end = 1'b0, batch_end = 1'b0;
  logic flush_busy, lt_idle;
  logic up_valid, up_ready = 1'b1;
  ncrec_t up_rec;
  logic [31:0] stat_hot_upd, stat_cold_upd;

  gs_logging_table #(.HOT_ENTRIES(HOT), .COLD_ENTRIES(COLD)) dut (.*);

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int logged [POOL];     // numbers logged (per batch)
  int got    [POOL];     // numbers received (per batch)
  int recs   [POOL];     // records received (per batch)
  bit is_hot [POOL];
  int n_evict = 0, n_zero = 0, n_hot_early = 0;
  bit in_batch_flush = 1'b0;

  // monitor of the update channel
  always @(posedge clk) begin
    if (rst_n && up_valid && up_ready) begin
      if (up_rec.num == '0) n_zero++;
      if (int'(up_rec.id) < POOL) begin
        got[up_rec.id]  += int'(up_rec.num);
        recs[up_rec.id] += 1;
        if (is_hot[up_rec.id] && !in_batch_flush) n_hot_early++;
      end
      if (dut.st == 2'd1) n_evict++;
    end
  end
  always @(negedge clk) up_ready <= ($urandom_range(0, 2) != 0);

  task automatic wait_idle();
    @(negedge clk);
    while (!lt_idle) @(negedge clk);
  endtask

  initial begin
    int ntiles, tlen;
    int tables [8][16];
    int tl [8];
    int owner [HOT];
    int freq [POOL];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < 30; b++) begin
      for (int i = 0; i < POOL; i++) begin logged[i] = 0; got[i] = 0; recs[i] = 0; is_hot[i] = 0; freq[i] = 0; end
      for (int s = 0; s < HOT; s++) owner[s] = -1;
      ntiles = $urandom_range(2, 8);
      // Gaussian tables of the batch; IDs near the batch's base are shared
      for (int t = 0; t < ntiles; t++) begin
        tl[t] = $urandom_range(1, 16);
        for (int k = 0; k < tl[t]; k++) begin
          int id;
          id = ($urandom_range(0, 1) == 0) ? $urandom_range(0, 11) : $urandom_range(0, POOL - 1);
          for (int q = 0; q < k; q++) if (tables[t][q] == id) id = -1;
          tables[t][k] = id;
        end
      end
      // profiling
      for (int t = 0; t < ntiles; t++)
        for (int k = 0; k < tl[t]; k++) begin
          if (tables[t][k] < 0) continue;
          @(negedge clk);
          prof_valid = 1'b1; prof_id = gid_t'(tables[t][k]);
          if (owner[tables[t][k] % HOT] < 0) owner[tables[t][k] % HOT] = tables[t][k];
          if (owner[tables[t][k] % HOT] == tables[t][k]) freq[tables[t][k]]++;
        end
      @(negedge clk);
      prof_valid = 1'b0;
      for (int i = 0; i < POOL; i++) is_hot[i] = (freq[i] >= 2);
      // rendering: per tile one record per Gaussian
      for (int t = 0; t < ntiles; t++) begin
        for (int k = 0; k < tl[t]; k++) begin
          if (tables[t][k] < 0) continue;
          lg_valid = 1'b1; lg_id = gid_t'(tables[t][k]); lg_num = 5'($urandom_range(0, 16));
          #1;
          while (!lg_ready) begin @(negedge clk); #1; end
          logged[tables[t][k]] += int'(lg_num);
          @(negedge clk);
          lg_valid = 1'b0;
        end
        if (t == ntiles - 1) begin in_batch_flush = 1'b1; batch_end = 1'b1; end
        else tile_end = 1'b1;
        while (!lt_idle) @(negedge clk);
        @(negedge clk);
        tile_end = 1'b0; batch_end = 1'b0;
        wait_idle();
        @(negedge clk);
        // cold Gaussians complete after every tile
        for (int i = 0; i < POOL; i++) begin
          if (is_hot[i] && t != ntiles - 1) continue;
          checks++;
          if (got[i] != logged[i]) begin
            failures++;
            if (failures < 10) $display("batch %0d tile %0d id %0d: received %0d logged %0d (hot %0d)", b, t, i, got[i], logged[i], is_hot[i]);
          end
        end
      end
      in_batch_flush = 1'b0;
      for (int i = 0; i < POOL; i++) begin
        if (!is_hot[i] || logged[i] == 0) continue;
        checks++;
        if (recs[i] != 1) begin failures++; $display("hot id %0d: %0d records", i, recs[i]); end
      end
    end
    checks++;
    if (n_zero != 0 || n_hot_early != 0) begin failures++; $display("zero records %0d, early hot records %0d", n_zero, n_hot_early); end
    checks++;
    if (stat_hot_upd == 0 || stat_cold_upd == 0 || n_evict == 0) begin
      failures++; $display("mechanisms: hot %0d cold %0d evictions %0d", stat_hot_upd, stat_cold_upd, n_evict);
    end
    $display("hot updates %0d, cold updates %0d, evictions %0d", stat_hot_upd, stat_cold_upd, n_evict);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
