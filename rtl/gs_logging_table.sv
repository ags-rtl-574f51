// gs_logging_table: on-chip staging of Gaussian contribution information for
// key frames (GS logging buffer for "hot" Gaussians, GS logging cache for
// "cold" ones).
//
// Before a batch of tiles is rendered, the IDs of the batch's Gaussian tables
// are streamed in (prof_*). Each ID is entered in the direct-mapped logging
// buffer with a small frequency counter; a Gaussian seen in two or more tables
// of the batch is "hot". During rendering the GS array delivers, per Gaussian
// and tile, the number of pixels for which its alpha was below Thresh_alpha
// (lg_*). A hot Gaussian accumulates its number in the logging buffer, which is
// written out only once, at the end of the batch (batch_end). Every other
// Gaussian accumulates in the direct-mapped logging cache, which is written
// out after each tile (tile_end) or when a conflicting ID needs the slot. A
// write-out sends (ID, number) to the update unit (up_*), which adds it to the
// count kept in DRAM. Zero numbers are not sent.
//
// This design's choices: the 4 KB of the table are split into HOT_ENTRIES
// buffer and COLD_ENTRIES cache entries of 32 bits (tag, 12-bit number and
// flags); both are direct-mapped on the low ID bits; a buffer slot already held
// by another Gaussian leaves the newcomer cold; the frequency threshold for
// "hot" is 2, as in the two-table example. The written-back slots are kept in
// a list so a flush costs one cycle per used slot rather than per slot.
//
// Timing: one input per cycle when ready; flushes run one entry per cycle on
// up_valid/up_ready; flush_busy is high while a flush runs. tile_end and
// batch_end are taken only while lt_idle is high.
module gs_logging_table
  import ags_pkg::*;
#(
  parameter int unsigned HOT_ENTRIES  = 512,
  parameter int unsigned COLD_ENTRIES = 512,
  parameter int unsigned HI = $clog2(HOT_ENTRIES),
  parameter int unsigned CI = $clog2(COLD_ENTRIES)
) (
  input  logic         clk,
  input  logic         rst_n,
  // profiling of the batch's Gaussian tables
  input  logic         prof_valid,
  input  gid_t         prof_id,
  // non-contributory numbers from the GS array
  input  logic         lg_valid,
  output logic         lg_ready,
  input  gid_t         lg_id,
  input  logic [4:0]   lg_num,
  // flush commands
  input  logic         tile_end,
  input  logic         batch_end,
  output logic         flush_busy,
  output logic         lt_idle,     // ready for a tile_end / batch_end
  // to the update unit
  output logic         up_valid,
  input  logic         up_ready,
  output ncrec_t       up_rec,
  // statistics
  output logic [31:0]  stat_hot_upd,
  output logic [31:0]  stat_cold_upd
);

  typedef struct packed {
    logic               v;
    logic [GID_W-1:0]   id;    // full ID kept as tag (simplest compare)
    logic [1:0]         freq;
    ncnum_t             num;
  } ent_t;

  ent_t hot  [HOT_ENTRIES];
  ent_t cold [COLD_ENTRIES];

  // lists of used slots
  logic [HI-1:0] hot_list  [HOT_ENTRIES];
  logic [CI-1:0] cold_list [COLD_ENTRIES];
  logic [HI:0]   hot_n;
  logic [CI:0]   cold_n;

  typedef enum logic [1:0] {L_RUN, L_EVICT, L_FCOLD, L_FHOT} st_e;
  st_e st;
  logic [HI:0] fptr;
  ncrec_t      evict_rec;
  logic        batch_pend;

  logic [HI-1:0] ph, lh;
  logic [CI-1:0] lc;
  assign ph = prof_id[HI-1:0];
  assign lh = lg_id[HI-1:0];
  assign lc = lg_id[CI-1:0];

  ent_t hot_l, cold_l;
  assign hot_l  = hot[lh];
  assign cold_l = cold[lc];

  logic hot_hit, cold_hit, cold_conf;
  assign hot_hit   = hot_l.v && hot_l.id == lg_id && hot_l.freq >= 2'd2;
  assign cold_hit  = cold_l.v && cold_l.id == lg_id;
  assign cold_conf = cold_l.v && cold_l.id != lg_id;

  // while flushing or evicting, no new numbers are taken
  assign lg_ready   = (st == L_RUN) && !tile_end && !batch_end;
  assign flush_busy = (st == L_FCOLD) || (st == L_FHOT);
  assign lt_idle    = (st == L_RUN);

  function automatic ncnum_t sat_add(ncnum_t a, logic [4:0] b);
    logic [NUM_W:0] s;
    s = {1'b0, a} + (NUM_W+1)'(b);
    return s[NUM_W] ? '1 : s[NUM_W-1:0];
  endfunction

  // output record
  ent_t fl_ent;
  always_comb begin
    fl_ent   = (st == L_FHOT) ? hot[hot_list[fptr[HI-1:0]]] : cold[cold_list[fptr[CI-1:0]]];
    up_valid = 1'b0;
    up_rec   = '0;
    case (st)
      L_EVICT: begin up_valid = 1'b1; up_rec = evict_rec; end
      L_FCOLD, L_FHOT: begin
        up_valid   = fl_ent.num != '0;
        up_rec.id  = fl_ent.id;
        up_rec.num = fl_ent.num;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= L_RUN; fptr <= '0; hot_n <= '0; cold_n <= '0; evict_rec <= '0;
      stat_hot_upd <= '0; stat_cold_upd <= '0;
      for (int i = 0; i < HOT_ENTRIES; i++)  hot[i]  <= '0;
      for (int i = 0; i < COLD_ENTRIES; i++) cold[i] <= '0;
      for (int i = 0; i < HOT_ENTRIES; i++)  hot_list[i]  <= '0;
      for (int i = 0; i < COLD_ENTRIES; i++) cold_list[i] <= '0;
    end else begin
      case (st)
        L_RUN: begin
          if (batch_end) begin
            st   <= (cold_n != '0) ? L_FCOLD : (hot_n != '0) ? L_FHOT : L_RUN;
            fptr <= '0;
          end else if (tile_end) begin
            st   <= (cold_n != '0) ? L_FCOLD : L_RUN;
            fptr <= '0;
          end else begin
            if (prof_valid) begin
              if (!hot[ph].v) begin
                hot[ph]         <= '{v: 1'b1, id: prof_id, freq: 2'd1, num: '0};
                hot_list[hot_n[HI-1:0]] <= ph;
                hot_n           <= hot_n + 1'b1;
              end else if (hot[ph].id == prof_id && hot[ph].freq != 2'd3) begin
                hot[ph].freq <= hot[ph].freq + 2'd1;
              end
            end
            if (lg_valid) begin
              if (hot_hit) begin
                hot[lh].num  <= sat_add(hot_l.num, lg_num);
                stat_hot_upd <= stat_hot_upd + 32'd1;
              end else if (cold_hit) begin
                cold[lc].num  <= sat_add(cold_l.num, lg_num);
                stat_cold_upd <= stat_cold_upd + 32'd1;
              end else begin
                if (cold_conf) begin
                  evict_rec <= '{id: cold_l.id, num: cold_l.num};
                  if (cold_l.num != '0) st <= L_EVICT;
                end else begin
                  cold_list[cold_n[CI-1:0]] <= lc;
                  cold_n <= cold_n + 1'b1;
                end
                cold[lc]      <= '{v: 1'b1, id: lg_id, freq: 2'd0, num: NUM_W'(lg_num)};
                stat_cold_upd <= stat_cold_upd + 32'd1;
              end
            end
          end
        end
        L_EVICT: if (up_ready) st <= L_RUN;
        L_FCOLD: if (up_ready || !up_valid) begin
          cold[cold_list[fptr[CI-1:0]]] <= '0;
          if (fptr + 1'b1 >= (HI+1)'(cold_n)) begin
            cold_n <= '0;
            fptr   <= '0;
            // a batch end goes on to the hot entries
            st     <= (batch_pend && hot_n != '0) ? L_FHOT : L_RUN;
          end else fptr <= fptr + 1'b1;
        end
        L_FHOT: if (up_ready || !up_valid) begin
          hot[hot_list[fptr[HI-1:0]]] <= '0;
          if (fptr + 1'b1 >= hot_n) begin
            hot_n <= '0;
            fptr  <= '0;
            st    <= L_RUN;
          end else fptr <= fptr + 1'b1;
        end
        default: st <= L_RUN;
      endcase
    end
  end

  // remembers that the running cold flush belongs to a batch end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) batch_pend <= 1'b0;
    else if (st == L_RUN && batch_end) batch_pend <= 1'b1;
    else if (st == L_RUN && tile_end)  batch_pend <= 1'b0;
  end

endmodule
