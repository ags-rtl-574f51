// alpha_buffer: alpha values precomputed by assisting GPEs.
//
// Each entry holds a tag (the GPE the alpha is for), the position of the
// Gaussian in the tile's list and the alpha value, following the Tag/alpha
// table of the GS array. An assisting GPE writes an entry when its stage 1
// finishes; the autonomous GPE n looks up (tag n, its next list position) and,
// on a hit, skips stage 1 and consumes the entry.
//
// This design's choices: ENTRIES slots (16) shared by the 16 GPEs of an array;
// up to NGPE writes per cycle go to the lowest free slots and a write that
// finds no free slot is dropped (the owner then computes that alpha itself, so
// only time is lost); entries that can no longer be used are freed every cycle:
// those whose owner has terminated or has already moved past the position.
//
// Timing: writes and frees take effect at the clock edge; lookups are
// combinational on the current contents.
module alpha_buffer
  import ags_pkg::*;
#(
  parameter int unsigned NGPE    = 16,
  parameter int unsigned ENTRIES = 16,
  parameter int unsigned AW      = 8,
  parameter int unsigned TW      = (NGPE > 1) ? $clog2(NGPE) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     flush,
  // writes from assistants
  input  logic [NGPE-1:0]          wr_en,
  input  logic [NGPE-1:0][TW-1:0]  wr_tag,
  input  logic [NGPE-1:0][AW-1:0]  wr_idx,
  input  logic [NGPE-1:0][15:0]    wr_alpha,
  // lookups from autonomous GPEs: GPE i looks for (tag i, lk_idx[i])
  input  logic [NGPE-1:0][AW-1:0]  lk_idx,
  output logic [NGPE-1:0]          lk_hit,
  output logic [NGPE-1:0][15:0]    lk_alpha,
  input  logic [NGPE-1:0]          lk_consume,
  // owner progress, to free stale entries
  input  logic [NGPE-1:0]          owner_done,
  output logic [$clog2(ENTRIES+1)-1:0] n_used
);

  logic [ENTRIES-1:0]          v;
  logic [ENTRIES-1:0][TW-1:0]  tag;
  logic [ENTRIES-1:0][AW-1:0]  idx;
  logic [ENTRIES-1:0][15:0]    alp;

  // lookup
  logic [NGPE-1:0][ENTRIES-1:0] hit_vec;
  always_comb begin
    for (int g = 0; g < NGPE; g++) begin
      lk_hit[g]   = 1'b0;
      lk_alpha[g] = '0;
      for (int e = 0; e < ENTRIES; e++) begin
        hit_vec[g][e] = v[e] && (tag[e] == TW'(g)) && (idx[e] == lk_idx[g]);
        if (hit_vec[g][e]) begin
          lk_hit[g]   = 1'b1;
          lk_alpha[g] = alp[e];
        end
      end
    end
  end

  // free: consumed, owner finished, or owner already past the position
  logic [ENTRIES-1:0] free_e;
  always_comb begin
    for (int e = 0; e < ENTRIES; e++) begin
      free_e[e] = !v[e] || owner_done[tag[e]] || (idx[e] < lk_idx[tag[e]]);
      for (int g = 0; g < NGPE; g++)
        if (lk_consume[g] && hit_vec[g][e]) free_e[e] = 1'b1;
    end
  end

  // slot allocation for writes (lowest free slots first)
  localparam int unsigned SW = $clog2(NGPE + 1);
  logic [ENTRIES-1:0]         taken;
  logic [ENTRIES-1:0][SW-1:0] alloc_src;   // writer + 1, 0 = none
  logic                       found;
  always_comb begin
    taken     = '0;
    alloc_src = '0;
    for (int g = 0; g < NGPE; g++) begin
      found = 1'b0;
      for (int e = 0; e < ENTRIES; e++) begin
        if (wr_en[g] && !found && free_e[e] && !taken[e]) begin
          taken[e]     = 1'b1;
          alloc_src[e] = SW'(g + 1);
          found        = 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v <= '0; tag <= '0; idx <= '0; alp <= '0;
    end else if (flush) begin
      v <= '0;
    end else begin
      for (int e = 0; e < ENTRIES; e++) begin
        if (free_e[e]) v[e] <= 1'b0;
        for (int g = 0; g < NGPE; g++) begin
          if (alloc_src[e] == SW'(g + 1)) begin
            v[e]   <= 1'b1;
            tag[e] <= wr_tag[g];
            idx[e] <= wr_idx[g];
            alp[e] <= wr_alpha[g];
          end
        end
      end
    end
  end

  always_comb begin
    n_used = '0;
    for (int e = 0; e < ENTRIES; e++) n_used = n_used + ($clog2(ENTRIES+1))'(v[e]);
  end

endmodule
