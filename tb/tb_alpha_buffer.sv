// tb_alpha_buffer: random traffic of assist writes, owner lookups, consumes,
// owner completions and owner progress. A list of (tag, position, alpha)
// entries in the testbench follows the buffer's rules (a write needs a free
// entry, entries are released when consumed, when their owner is done or when
// the owner has moved past their position); every cycle each GPE's hit/alpha
// and the occupancy must match it. The buffer must fill up and drop writes at
// least once.
module tb_alpha_buffer;
  localparam int unsigned NGPE = 16, ENTRIES = 16, AW = 8, TW = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic flush = 1'b0;
  logic [NGPE-1:0] wr_en = '0;
  logic [NGPE-1:0][TW-1:0] wr_tag = '0;
  logic [NGPE-1:0][AW-1:0] wr_idx = '0;
  logic [NGPE-1:0][15:0] wr_alpha = '0;
  logic [NGPE-1:0][AW-1:0] lk_idx = '0;
  logic [NGPE-1:0] lk_hit;
  logic [NGPE-1:0][15:0] lk_alpha;
  logic [NGPE-1:0] lk_consume = '0;
  logic [NGPE-1:0] owner_done = '0;
  logic [4:0] n_used;

  alpha_buffer #(.NGPE(NGPE), .ENTRIES(ENTRIES), .AW(AW)) dut (.*);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { int tag; int idx; int alpha; } ent_t;
  ent_t m [$];
  int next_w [NGPE];   // next position a helper may write for each owner
  int n_full = 0, n_hits = 0, n_cons = 0;

  function automatic int find(int tag, int idx);
    foreach (m[k]) if (m[k].tag == tag && m[k].idx == idx) return k;
    return -1;
  endfunction

  initial begin
    ent_t nm [$];
    int k, room, nw;
    for (int g = 0; g < NGPE; g++) next_w[g] = 1;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      // new tile every 500 cycles
      if (cyc % 500 == 499) begin
        flush = 1'b1; wr_en = '0; lk_consume = '0; owner_done = '0;
        @(negedge clk);
        flush = 1'b0; m.delete(); lk_idx = '0;
        for (int g = 0; g < NGPE; g++) next_w[g] = 1;
        continue;
      end
      // owners progress
      for (int g = 0; g < NGPE; g++) begin
        owner_done[g] = ($urandom_range(0, 199) == 0);
        if ($urandom_range(0, 3) == 0 && lk_idx[g] < 8'd200) lk_idx[g] = lk_idx[g] + 8'd1;
        if (next_w[g] <= int'(lk_idx[g])) next_w[g] = int'(lk_idx[g]) + 1;
      end
      // writers: up to 4 per cycle
      wr_en = '0;
      nw = $urandom_range(0, 4);
      for (int w = 0; w < nw; w++) begin
        int g, t;
        g = $urandom_range(0, NGPE - 1);
        t = $urandom_range(0, NGPE - 1);
        if (wr_en[g] || next_w[t] > 250) continue;
        wr_en[g] = 1'b1; wr_tag[g] = TW'(t); wr_idx[g] = AW'(next_w[t]);
        wr_alpha[g] = 16'($urandom);
        next_w[t]++;
      end
      #1;
      // lookups against the model
      lk_consume = '0;
      for (int g = 0; g < NGPE; g++) begin
        k = find(g, int'(lk_idx[g]));
        checks++;
        if (lk_hit[g] !== (k >= 0) || (k >= 0 && lk_alpha[g] !== 16'(m[k].alpha))) begin
          failures++;
          if (failures < 10) $display("cyc %0d gpe %0d: hit %b alpha %h, model %0d", cyc, g, lk_hit[g], lk_alpha[g], k);
        end
        if (k >= 0) begin n_hits++; lk_consume[g] = ($urandom_range(0, 1) == 0); end
      end
      checks++;
      if (int'(n_used) != m.size()) begin failures++; if (failures < 10) $display("n_used %0d model %0d", n_used, m.size()); end
      // model update at the clock edge
      nm.delete();
      foreach (m[i]) begin
        bit fr;
        fr = owner_done[m[i].tag] || (m[i].idx < int'(lk_idx[m[i].tag])) ||
             (lk_consume[m[i].tag] && m[i].idx == int'(lk_idx[m[i].tag]));
        if (lk_consume[m[i].tag] && m[i].idx == int'(lk_idx[m[i].tag])) n_cons++;
        if (!fr) nm.push_back(m[i]);
      end
      room = ENTRIES - nm.size();
      for (int g = 0; g < NGPE; g++) begin
        if (!wr_en[g]) continue;
        if (room > 0) begin
          nm.push_back('{tag: int'(wr_tag[g]), idx: int'(wr_idx[g]), alpha: int'(wr_alpha[g])});
          room--;
        end else n_full++;
      end
      m = nm;
      @(negedge clk);
    end
    checks++;
    if (n_full == 0 || n_hits == 0 || n_cons == 0) begin
      failures++; $display("mechanisms: full %0d hits %0d consumed %0d", n_full, n_hits, n_cons);
    end
    $display("dropped writes %0d, hits %0d, consumed %0d", n_full, n_hits, n_cons);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
