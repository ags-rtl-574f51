// gs_skipping_table: selects the Gaussians of a tile to be rendered on a
// non-key frame.
//
// The tile's Gaussian table (IDs in depth order) streams in. For each ID the
// table needs the Gaussian's non-contributory number recorded on the last key
// frame. It looks first in the GS skipping buffer and the GS skipping cache,
// and reads DRAM on a miss (one read outstanding). Every list entry then holds
// (Gaussian ID, number, valid = 1). The comparison unit checks LANES entries
// per cycle and clears the valid flag of Gaussians whose number is larger than
// the threshold. Finally the valid IDs stream out in their original order; the
// GS array fetches and renders only those.
//
// This design's choices: buffer and cache are direct-mapped on the low ID bits
// (HOT_ENTRIES and COLD_ENTRIES of 32 bits each, the 4 KB of the table); a
// number fetched from DRAM goes into the cache; a cache entry that has been
// hit again is "hot" and moves to the buffer when a miss evicts it, so the
// buffer keeps the Gaussians shared by many tiles. inval empties both when a new
// key frame has rewritten the numbers. A DRAM word is {epoch, count}; a word
// whose epoch differs from the current key-frame epoch counts as 0 (the
// Gaussian was never logged, so it is kept). At most DEPTH entries per tile
// are kept; further IDs are dropped and counted in stat_overflow.
module gs_skipping_table
  import ags_pkg::*;
#(
  parameter int unsigned DEPTH        = 204,
  parameter int unsigned LANES        = 16,
  parameter int unsigned HOT_ENTRIES  = 512,
  parameter int unsigned COLD_ENTRIES = 512,
  parameter int unsigned AW = $clog2(DEPTH),
  parameter int unsigned HI = $clog2(HOT_ENTRIES),
  parameter int unsigned CI = $clog2(COLD_ENTRIES)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            inval,
  input  logic [3:0]      epoch,
  input  ncnum_t          thresh,
  // Gaussian table of one tile
  input  logic            tb_valid,
  output logic            tb_ready,
  input  gid_t            tb_id,
  input  logic            tb_last,
  // DRAM read of non-contributory numbers
  output logic            rd_req_valid,
  input  logic            rd_req_ready,
  output gid_t            rd_req_addr,
  input  logic            rd_rsp_valid,
  input  logic [15:0]     rd_rsp_data,
  // valid Gaussians, in order
  output logic            out_valid,
  input  logic            out_ready,
  output gid_t            out_id,
  output logic            out_last,   // last valid ID of the tile
  output logic            out_empty,  // pulses when a tile keeps no Gaussian
  // statistics
  output logic [31:0]     stat_skipped,
  output logic [31:0]     stat_kept,
  output logic [31:0]     stat_mem_reads,
  output logic [31:0]     stat_overflow
);

  typedef struct packed {
    logic   v;
    logic   hot;
    gid_t   id;
    ncnum_t num;
  } sent_t;

  sent_t sbuf [HOT_ENTRIES];
  sent_t scac [COLD_ENTRIES];

  gid_t   [DEPTH-1:0] l_id;
  ncnum_t [DEPTH-1:0] l_num;
  logic   [DEPTH-1:0] l_keep;
  logic   [AW:0]      n;         // entries in the list
  logic   [AW:0]      cp;        // compare / output position

  typedef enum logic [2:0] {K_LOAD, K_MISS, K_WAIT, K_CMP, K_CMPW, K_OUT} st_e;
  st_e  st;
  gid_t miss_id;
  logic miss_last;

  logic [HI-1:0] bh;
  logic [CI-1:0] ch;
  assign bh = tb_id[HI-1:0];
  assign ch = tb_id[CI-1:0];
  logic bhit, chit;
  assign bhit = sbuf[bh].v && sbuf[bh].id == tb_id;
  assign chit = scac[ch].v && scac[ch].id == tb_id;

  assign tb_ready     = (st == K_LOAD) && !inval;
  assign rd_req_valid = (st == K_MISS);
  assign rd_req_addr  = miss_id;

  ncnum_t rsp_cnt;
  assign rsp_cnt = (rd_rsp_data[15:12] == epoch) ? rd_rsp_data[11:0] : '0;

  // comparison unit over LANES entries
  logic               cu_in_valid, cu_out_valid;
  logic [LANES-1:0]   cu_mask, cu_keep;
  ncnum_t [LANES-1:0] cu_num;
  logic [AW:0]        cmp_base;
  logic [LANES-1:0]   cu_mask_q;
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      cu_mask[l] = (cp + (AW+1)'(l)) < n;
      cu_num[l]  = cu_mask[l] ? l_num[AW'(cp + (AW+1)'(l))] : '0;
    end
  end
  assign cu_in_valid = (st == K_CMP);

  comparison_unit #(.LANES(LANES)) u_cmp (
    .clk, .rst_n, .thresh,
    .in_valid(cu_in_valid), .in_mask(cu_mask), .in_num(cu_num),
    .out_valid(cu_out_valid), .out_keep(cu_keep)
  );

  // output: next kept entry at or after cp
  logic        nxt_found, more_found;
  logic [AW:0] nxt_pos;
  always_comb begin
    nxt_found = 1'b0; nxt_pos = '0; more_found = 1'b0;
    for (int j = 0; j < DEPTH; j++) begin
      if ((AW+1)'(j) >= cp && (AW+1)'(j) < n && l_keep[j]) begin
        if (!nxt_found) begin nxt_found = 1'b1; nxt_pos = (AW+1)'(j); end
        else more_found = 1'b1;
      end
    end
  end
  assign out_valid = (st == K_OUT) && nxt_found;
  assign out_id    = l_id[AW'(nxt_pos)];
  assign out_last  = !more_found;
  assign out_empty = (st == K_OUT) && !nxt_found && (cp == '0);

  task automatic push(input gid_t id, input ncnum_t num);
    if (n < (AW+1)'(DEPTH)) begin
      l_id[AW'(n)]   <= id;
      l_num[AW'(n)]  <= num;
      l_keep[AW'(n)] <= 1'b1;
      n              <= n + 1'b1;
    end else begin
      stat_overflow <= stat_overflow + 32'd1;
    end
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= K_LOAD; n <= '0; cp <= '0; cmp_base <= '0; miss_id <= '0; miss_last <= 1'b0;
      l_id <= '0; l_num <= '0; l_keep <= '0;
      stat_skipped <= '0; stat_kept <= '0; stat_mem_reads <= '0; stat_overflow <= '0;
      for (int i = 0; i < HOT_ENTRIES; i++)  sbuf[i] <= '0;
      for (int i = 0; i < COLD_ENTRIES; i++) scac[i] <= '0;
    end else begin
      if (inval) begin
        for (int i = 0; i < HOT_ENTRIES; i++)  sbuf[i].v <= 1'b0;
        for (int i = 0; i < COLD_ENTRIES; i++) scac[i].v <= 1'b0;
      end
      case (st)
        K_LOAD: if (tb_valid && tb_ready) begin
          if (bhit) begin
            push(tb_id, sbuf[bh].num);
            if (tb_last) begin st <= K_CMP; cp <= '0; end
          end else if (chit) begin
            push(tb_id, scac[ch].num);
            scac[ch].hot <= 1'b1;
            if (tb_last) begin st <= K_CMP; cp <= '0; end
          end else begin
            miss_id   <= tb_id;
            miss_last <= tb_last;
            st        <= K_MISS;
          end
        end
        K_MISS: if (rd_req_ready) begin
          st             <= K_WAIT;
          stat_mem_reads <= stat_mem_reads + 32'd1;
        end
        K_WAIT: if (rd_rsp_valid) begin
          push(miss_id, rsp_cnt);
          // evicted hot cache entry moves to the buffer
          if (scac[miss_id[CI-1:0]].v && scac[miss_id[CI-1:0]].hot)
            sbuf[scac[miss_id[CI-1:0]].id[HI-1:0]] <= scac[miss_id[CI-1:0]];
          scac[miss_id[CI-1:0]] <= '{v: 1'b1, hot: 1'b0, id: miss_id, num: rsp_cnt};
          if (miss_last) begin st <= K_CMP; cp <= '0; end
          else st <= K_LOAD;
        end
        K_CMP: begin
          cmp_base <= cp;
          st       <= K_CMPW;
        end
        K_CMPW: if (cu_out_valid) begin
          for (int l = 0; l < LANES; l++) begin
            if ((cmp_base + (AW+1)'(l)) < n) begin
              l_keep[AW'(cmp_base + (AW+1)'(l))] <= cu_keep[l];
            end
          end
          stat_skipped <= stat_skipped + 32'($countones(~cu_keep & cu_mask_q));
          if (cmp_base + (AW+1)'(LANES) >= n) begin
            st <= K_OUT;
            cp <= '0;
          end else begin
            cp <= cmp_base + (AW+1)'(LANES);
            st <= K_CMP;
          end
        end
        K_OUT: begin
          if (!nxt_found) begin
            // nothing (more) to send: the tile is done
            st <= K_LOAD;
            n  <= '0;
            cp <= '0;
          end else if (out_ready) begin
            stat_kept <= stat_kept + 32'd1;
            if (!more_found) begin
              st <= K_LOAD;
              n  <= '0;
              cp <= '0;
            end else cp <= nxt_pos + 1'b1;
          end
        end
        default: st <= K_LOAD;
      endcase
    end
  end

  // lanes that held a Gaussian in the comparison being collected
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cu_mask_q <= '0;
    else if (cu_in_valid) cu_mask_q <= cu_mask;
  end

endmodule
