// update_unit: read-modify-write of non-contributory numbers in DRAM.
//
// The GS logging table hands over (Gaussian ID, number) records. Each of the
// UNITS entries (16 in AGS-Edge) takes one record, holding the update address
// (the Gaussian ID), the update number and, once DRAM has answered, the
// Gaussian's number read from DRAM; its adder forms the sum, which the entry
// writes back. Entries work independently, so up to UNITS read-modify-writes
// are in flight.
//
// This design's choices:
//   * DRAM word of a Gaussian: {epoch[3:0], count[11:0]}. The epoch is the key
//     frame counter modulo 16; a word from an older key frame reads as count 0,
//     so recording restarts with every key frame without a separate clearing
//     pass. Counts saturate at 4095.
//   * A record for an ID that an entry already holds is merged into that entry
//     (its update number, or its sum if the read has returned), so two updates
//     of one Gaussian never race in DRAM.
//   * The DRAM port is a request channel (valid/ready, one request per cycle,
//     lowest entry first, writes before reads) and a response channel returning
//     read data with the entry number as tag, in any order.
module update_unit
  import ags_pkg::*;
#(
  parameter int unsigned UNITS = 16,
  parameter int unsigned TAGW  = (UNITS > 1) ? $clog2(UNITS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [3:0]       epoch,
  // records from the GS logging table
  input  logic             in_valid,
  output logic             in_ready,
  input  ncrec_t           in_rec,
  // DRAM request channel
  output logic             mem_req_valid,
  input  logic             mem_req_ready,
  output logic             mem_req_we,
  output gid_t             mem_req_addr,
  output logic [15:0]      mem_req_wdata,
  output logic [TAGW-1:0]  mem_req_tag,
  // DRAM read response channel
  input  logic             mem_rsp_valid,
  input  logic [TAGW-1:0]  mem_rsp_tag,
  input  logic [15:0]      mem_rsp_data,
  output logic             idle,
  output logic [31:0]      stat_merges
);

  typedef enum logic [1:0] {E_FREE, E_RD, E_WAIT, E_WR} est_e;

  est_e   [UNITS-1:0]        est;
  gid_t   [UNITS-1:0]        addr;
  logic   [UNITS-1:0][12:0]  unum;   // update number (one bit of headroom)
  ncnum_t [UNITS-1:0]        sum;

  function automatic ncnum_t sat12(logic [13:0] v);
    return (v > 14'd4095) ? 12'd4095 : v[11:0];
  endfunction

  // match of the incoming ID against busy entries, and a free entry
  logic                merge_hit, free_found;
  logic [TAGW-1:0]     merge_idx, free_idx;
  always_comb begin
    merge_hit = 1'b0; merge_idx = '0;
    free_found = 1'b0; free_idx = '0;
    for (int e = 0; e < UNITS; e++) begin
      if (!merge_hit && est[e] != E_FREE && addr[e] == in_rec.id) begin
        merge_hit = 1'b1; merge_idx = TAGW'(e);
      end
      if (!free_found && est[e] == E_FREE) begin
        free_found = 1'b1; free_idx = TAGW'(e);
      end
    end
  end
  assign in_ready = merge_hit || free_found;

  // request arbitration: writes first, then reads, lowest entry first
  logic            req_found;
  logic [TAGW-1:0] req_idx;
  always_comb begin
    req_found = 1'b0; req_idx = '0;
    for (int e = 0; e < UNITS; e++)
      if (!req_found && est[e] == E_WR) begin req_found = 1'b1; req_idx = TAGW'(e); end
    for (int e = 0; e < UNITS; e++)
      if (!req_found && est[e] == E_RD) begin req_found = 1'b1; req_idx = TAGW'(e); end
  end
  assign mem_req_valid = req_found;
  assign mem_req_we    = (est[req_idx] == E_WR);
  assign mem_req_addr  = addr[req_idx];
  assign mem_req_wdata = {epoch, sum[req_idx]};
  assign mem_req_tag   = req_idx;

  always_comb begin
    idle = 1'b1;
    for (int e = 0; e < UNITS; e++) if (est[e] != E_FREE) idle = 1'b0;
  end

  // count read from DRAM, zero if it belongs to an older key frame
  logic [11:0] rd_cnt;
  assign rd_cnt = (mem_rsp_data[15:12] == epoch) ? mem_rsp_data[11:0] : 12'd0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      est <= '{default: E_FREE};
      addr <= '0; unum <= '0; sum <= '0; stat_merges <= '0;
    end else begin
      if (mem_req_valid && mem_req_ready) begin
        if (est[req_idx] == E_WR) est[req_idx] <= E_FREE;
        else                      est[req_idx] <= E_WAIT;
      end
      if (mem_rsp_valid && est[mem_rsp_tag] == E_WAIT) begin
        est[mem_rsp_tag] <= E_WR;
        sum[mem_rsp_tag] <= sat12(14'(rd_cnt) + 14'(unum[mem_rsp_tag]));
      end
      if (in_valid && in_ready) begin
        if (merge_hit) begin
          stat_merges <= stat_merges + 32'd1;
          if (est[merge_idx] == E_WR) begin
            sum[merge_idx] <= sat12(14'(sum[merge_idx]) + 14'(in_rec.num));
            // a write being issued this cycle must go out again
            if (mem_req_valid && mem_req_ready && req_idx == merge_idx)
              est[merge_idx] <= E_WR;
          end else if (mem_rsp_valid && mem_rsp_tag == merge_idx && est[merge_idx] == E_WAIT) begin
            sum[merge_idx] <= sat12(14'(rd_cnt) + 14'(unum[merge_idx]) + 14'(in_rec.num));
          end else begin
            unum[merge_idx] <= unum[merge_idx] + 13'(in_rec.num);
          end
        end else begin
          est[free_idx]  <= E_RD;
          addr[free_idx] <= in_rec.id;
          unum[free_idx] <= 13'(in_rec.num);
        end
      end
    end
  end

endmodule
