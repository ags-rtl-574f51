// tb_gs_skipping_table: a DRAM model in the testbench holds the
// {epoch, count} words of a pool of Gaussians. Tiles of random ID lists stream
// in; the output must be exactly the IDs, in order, whose count for the
// current epoch is not above the threshold (a word of another epoch counts as
// zero), with out_last on the final one, or out_empty when none is kept. Lists
// longer than DEPTH must be cut at DEPTH and counted as overflow. Between
// epochs the DRAM words change and inval must drop the on-chip copies. The
// buffer/cache must save DRAM reads, and Gaussians must be skipped.
module tb_gs_skipping_table;
  import ags_pkg::*;
  localparam int unsigned DEPTH = 32, LANES = 16, HOT = 16, COLD = 16, POOL = 80;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic inval = 1'b0;
  logic [3:0] epoch = 4'd1;
  ncnum_t thresh = 12'd8;
  logic tb_valid = 1'b0, tb_ready, tb_last = 1'b0;
  gid_t tb_id = '0;
  logic rd_req_valid, rd_req_ready = 1'b1;
  gid_t rd_req_addr;
  logic rd_rsp_valid = 1'b0;
  logic [15:0] rd_rsp_data = '0;
  logic out_valid, out_ready = 1'b1, out_last, out_empty;
  gid_t out_id;
  logic [31:0] stat_skipped, stat_kept, stat_mem_reads, stat_overflow;

  gs_skipping_table #(.DEPTH(DEPTH), .LANES(LANES), .HOT_ENTRIES(HOT), .COLD_ENTRIES(COLD)) dut (.*);

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] dram [POOL];
  int rd_due = -1, now = 0;
  gid_t rd_addr_q = '0;
  always @(posedge clk) begin
    now++;
    rd_rsp_valid <= 1'b0;
    if (rst_n) begin
      if (rd_due >= 0 && now >= rd_due) begin
        rd_rsp_valid <= 1'b1;
        rd_rsp_data  <= dram[rd_addr_q];
        rd_due = -1;
      end
      if (rd_req_valid && rd_req_ready) begin
        rd_addr_q = rd_req_addr;
        rd_due = now + $urandom_range(1, 12);
      end
      rd_req_ready <= ($urandom_range(0, 3) != 0);
    end
  end

  gid_t exp_q [$];
  gid_t got_q [$];
  int   n_empty = 0, got_last = 0, got_empty = 0, n_ids = 0;
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin got_q.push_back(out_id); if (out_last) got_last++; end
    if (rst_n && out_empty) got_empty++;
  end

  initial begin
    int len, cnt, kept;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int e = 0; e < 5; e++) begin
      // new key frame: new counts (some words left from an older epoch)
      for (int i = 0; i < POOL; i++)
        dram[i] = {($urandom_range(0, 4) == 0) ? 4'(e) : 4'(e + 1), 12'($urandom_range(0, 20))};
      // IDs 0..3 are far above the threshold: tile 3 of each epoch keeps nothing
      for (int i = 0; i < 4; i++) dram[i] = {4'(e + 1), 12'd99};
      epoch = 4'(e + 1);
      thresh = 12'($urandom_range(4, 14));
      @(negedge clk); inval = 1'b1; @(negedge clk); inval = 1'b0;
      for (int t = 0; t < 40; t++) begin
        exp_q.delete(); got_q.delete(); got_last = 0; got_empty = 0;
        len = (t == 7) ? DEPTH + 5 : $urandom_range(1, DEPTH);
        kept = 0;
        for (int k = 0; k < len; k++) begin
          int id;
          id = (t == 3) ? k % 4 : $urandom_range(0, POOL - 1);
          cnt = (dram[id][15:12] == 4'(e + 1)) ? int'(dram[id][11:0]) : 0;
          if (k < DEPTH && !(cnt > int'(thresh))) begin exp_q.push_back(gid_t'(id)); kept++; end
          tb_valid = 1'b1; tb_id = gid_t'(id); tb_last = (k == len - 1);
          #1;
          while (!tb_ready) begin @(negedge clk); #1; end
          @(negedge clk);
          n_ids++;
        end
        tb_valid = 1'b0; tb_last = 1'b0;
        // drain
        for (int w = 0; w < 400; w++) begin
          out_ready = ($urandom_range(0, 2) != 0);
          @(negedge clk);
          if (got_last != 0 || got_empty != 0) break;
        end
        out_ready = 1'b1;
        checks++;
        if (got_q.size() != exp_q.size()) begin
          failures++; $display("epoch %0d tile %0d: %0d kept, expected %0d", e, t, got_q.size(), exp_q.size());
        end else begin
          foreach (exp_q[k]) begin
            checks++;
            if (got_q[k] !== exp_q[k]) failures++;
          end
        end
        checks++;
        if ((exp_q.size() == 0) != (got_empty == 1) || (exp_q.size() != 0) != (got_last == 1)) begin
          failures++; $display("tile %0d: last %0d empty %0d", t, got_last, got_empty);
        end
        if (exp_q.size() == 0) n_empty++;
      end
    end
    checks++;
    if (stat_overflow != 32'd25 || stat_skipped == 0 || stat_mem_reads >= 32'(n_ids) || n_empty == 0) begin
      failures++;
      $display("mechanisms: overflow %0d skipped %0d reads %0d of %0d ids, empty tiles %0d",
               stat_overflow, stat_skipped, stat_mem_reads, n_ids, n_empty);
    end
    $display("skipped %0d kept %0d, DRAM reads %0d for %0d IDs, overflow %0d", stat_skipped, stat_kept,
             stat_mem_reads, n_ids, stat_overflow);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
