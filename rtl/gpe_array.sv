// gpe_array: one 4x4 GPE array with its GPE scheduler, workload table and
// alpha buffer.
//
// The 16 GPEs render the 16 pixels of one 4x4 tile; all of them walk the same
// depth-ordered Gaussian list held in the array's Gauss buffer. A GPE in the
// autonomous state (AUTO) renders its own pixel: for its next Gaussian it first
// looks in the alpha buffer; on a hit it runs only stage 2 (one cycle), on a
// miss it runs stage 1 (four cycles) and then stage 2. A pixel finishes when
// its transmittance falls below 1e-4 or the list ends. Early-finishing GPEs
// would then idle, so the GPE scheduler walks the workload table (state,
// current Gaussian, assisted GPE per entry) and gives a finished GPE an
// unfinished one to assist (ASST): it computes stage 1 for the target's pixel
// on Gaussians LOOKAHEAD (2) positions ahead of the target and stores the
// alphas in the alpha buffer tagged with the target. When the target finishes
// or runs out of Gaussians the assistant goes back to IDLE and may be given
// another target. The lookahead of 2 follows the worked example (GPE1 starts
// on GS5 while GPE2 works on GS3); the choice of the first unfinished,
// unassisted GPE in table order, one assignment per cycle and one assistant
// per target are this design's choices.
//
// The array also keeps the Gaussian contribution information of the tile: for
// every list position it counts the pixels for which stage 2 saw an alpha
// below Thresh_alpha (the merge of the 16 pixels' verdicts for one Gaussian).
// With log_en set these (Gaussian ID, count) pairs are streamed out after the
// tile, one per cycle under valid/ready, for the GS logging table.
//
// Interface: load the list through ld_* (positions 0..list_len-1), then pulse
// start with list_len, the tile's top-left pixel (tile_x, tile_y) and
// assist_en. busy stays high through rendering and draining; done pulses once
// at the end; the pixel colours and transmittances then stay valid until the
// next start. Gradient computation is not part of this array.
module gpe_array
  import ags_pkg::*;
#(
  parameter int unsigned DEPTH         = 204,   // Gaussians per tile list
  parameter int unsigned ALPHA_ENTRIES = 16,
  parameter int unsigned LOOKAHEAD     = 2,
  parameter int unsigned AW            = $clog2(DEPTH),
  parameter int unsigned CW            = 5      // counts 0..16
) (
  input  logic                clk,
  input  logic                rst_n,
  // list loading
  input  logic                ld_we,
  input  logic [AW-1:0]       ld_addr,
  input  gid_t                ld_id,
  input  gfeat_t              ld_feat,
  // control
  input  logic                start,
  input  logic [AW:0]         list_len,
  input  logic [11:0]         tile_x,
  input  logic [11:0]         tile_y,
  input  logic [15:0]         thresh_alpha,
  input  logic                assist_en,
  input  logic                log_en,
  output logic                busy,
  output logic                done,
  // results
  output rgb_t  [15:0]        pix_color,
  output logic  [15:0][15:0]  pix_trans,
  // contribution information stream
  output logic                nc_valid,
  input  logic                nc_ready,
  output gid_t                nc_id,
  output logic [CW-1:0]       nc_num,
  // statistics
  output logic [31:0]         stat_hits,      // stage 2 fed from the alpha buffer (since reset)
  output logic [31:0]         stat_assists,   // assistant alphas written (since reset)
  output logic [31:0]         stat_cycles     // cycles of the last render
);

  localparam int unsigned NGPE = 16;
  localparam int unsigned TW   = 4;
  localparam int unsigned PW   = AW + 1;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} st_e;
  st_e st;

  // ---------------- Gauss buffer ----------------
  logic  [NGPE-1:0][AW-1:0] rd_addr;
  gid_t  [NGPE-1:0]         rd_id;
  gfeat_t [NGPE-1:0]        rd_feat;

  gauss_buffer #(.DEPTH(DEPTH), .NRD(NGPE), .AW(AW)) u_buf (
    .clk, .we(ld_we), .waddr(ld_addr), .wid(ld_id), .wfeat(ld_feat),
    .raddr(rd_addr), .rid(rd_id), .rfeat(rd_feat)
  );

  // ---------------- workload table ----------------
  gpe_state_e [NGPE-1:0]         mode;
  logic       [NGPE-1:0][PW-1:0] ptr;      // own next Gaussian
  logic       [NGPE-1:0]         own_fly;  // own stage 1 in flight
  logic       [NGPE-1:0]         asst_fly; // assist stage 1 in flight
  logic       [NGPE-1:0][TW-1:0] tgt;      // assisted GPE
  logic       [NGPE-1:0][PW-1:0] aidx;     // Gaussian of the assist in flight
  logic       [NGPE-1:0][PW-1:0] anext;    // next assist position
  logic       [NGPE-1:0]         helped;   // has an assistant
  logic       [AW:0]             len;
  logic       [11:0]             tx, ty;
  logic                          asst_on, log_on;
  logic       [AW-1:0]           dr_idx;   // drain position

  // ---------------- GPEs ----------------
  logic  [NGPE-1:0]        a_start, a_busy, a_done;
  gfeat_t [NGPE-1:0]       a_feat;
  logic  [NGPE-1:0][15:0]  a_px, a_py, a_alpha;
  logic  [NGPE-1:0]        b_valid, b_nc, b_term, term;
  logic  [NGPE-1:0][15:0]  b_alpha;
  logic                    clear;

  for (genvar i = 0; i < NGPE; i++) begin : g_gpe
    gpe u_gpe (
      .clk, .rst_n,
      .a_start(a_start[i]), .a_feat(a_feat[i]), .a_px(a_px[i]), .a_py(a_py[i]),
      .a_busy(a_busy[i]), .a_done(a_done[i]), .a_alpha(a_alpha[i]),
      .clear, .thresh_alpha,
      .b_valid(b_valid[i]), .b_alpha(b_alpha[i]), .b_col(rd_feat[i].col),
      .b_nc(b_nc[i]), .b_term(b_term[i]), .term(term[i]),
      .trans(pix_trans[i]), .color(pix_color[i])
    );
  end

  // ---------------- alpha buffer ----------------
  logic [NGPE-1:0]          wr_en, lk_hit, consume, fin;
  logic [NGPE-1:0][TW-1:0]  wr_tag;
  logic [NGPE-1:0][AW-1:0]  wr_idx, lk_idx;
  logic [NGPE-1:0][15:0]    lk_alpha;
  logic [$clog2(ALPHA_ENTRIES+1)-1:0] ab_used;

  alpha_buffer #(.NGPE(NGPE), .ENTRIES(ALPHA_ENTRIES), .AW(AW)) u_ab (
    .clk, .rst_n, .flush(start),
    .wr_en, .wr_tag, .wr_idx, .wr_alpha(a_alpha),
    .lk_idx, .lk_hit, .lk_alpha, .lk_consume(consume),
    .owner_done(fin), .n_used(ab_used)
  );

  // pixel coordinate of GPE g in Q12.4
  function automatic logic [15:0] pix_x(input logic [11:0] t, input int g);
    return 16'({4'd0, t + 12'(g % 4)} << POS_FRAC);
  endfunction
  function automatic logic [15:0] pix_y(input logic [11:0] t, input int g);
    return 16'({4'd0, t + 12'(g / 4)} << POS_FRAC);
  endfunction

  // ---------------- per-GPE decisions ----------------
  logic [NGPE-1:0]         own_start, own_hit, own_done, asst_start, asst_done, release_a;
  logic [NGPE-1:0][PW-1:0] cand;
  logic                    run;
  assign run = (st == S_RUN);

  always_comb begin
    for (int i = 0; i < NGPE; i++) begin
      fin[i]    = term[i] || (ptr[i] >= len);
      lk_idx[i] = AW'(ptr[i]);
      cand[i]   = (anext[i] > ptr[tgt[i]] + PW'(LOOKAHEAD)) ? anext[i]
                                                             : ptr[tgt[i]] + PW'(LOOKAHEAD);
      own_hit[i]    = run && mode[i] == GPE_AUTO && !fin[i] && !own_fly[i] && lk_hit[i];
      own_start[i]  = run && mode[i] == GPE_AUTO && !fin[i] && !own_fly[i] && !lk_hit[i] && !a_busy[i];
      own_done[i]   = own_fly[i] && a_done[i];
      asst_done[i]  = asst_fly[i] && a_done[i];
      release_a[i]  = run && mode[i] == GPE_ASST && !asst_fly[i] && (fin[tgt[i]] || cand[i] >= len);
      asst_start[i] = run && mode[i] == GPE_ASST && !asst_fly[i] && !release_a[i] && !a_busy[i]
                      && (ab_used < ($clog2(ALPHA_ENTRIES+1))'(ALPHA_ENTRIES));

      consume[i] = own_hit[i];
      b_valid[i] = own_hit[i] || own_done[i];
      b_alpha[i] = own_hit[i] ? lk_alpha[i] : a_alpha[i];

      a_start[i] = own_start[i] || asst_start[i];
      a_feat[i]  = rd_feat[i];
      a_px[i]    = (mode[i] == GPE_ASST) ? pix_x(tx, int'(tgt[i])) : pix_x(tx, i);
      a_py[i]    = (mode[i] == GPE_ASST) ? pix_y(ty, int'(tgt[i])) : pix_y(ty, i);

      wr_en[i]  = asst_done[i] && !fin[tgt[i]];
      wr_tag[i] = tgt[i];
      wr_idx[i] = AW'(aidx[i]);

      if (st == S_DRAIN && i == 0)      rd_addr[i] = dr_idx;
      else if (mode[i] == GPE_ASST)     rd_addr[i] = AW'(cand[i]);
      else                              rd_addr[i] = AW'(ptr[i]);
    end
  end

  // scheduler: the lowest idle GPE gets the first AUTO GPE, in table order,
  // that is unassisted and has more than LOOKAHEAD Gaussians left
  logic          sched_ok;
  logic [TW-1:0] sched_idle, sched_tgt;
  always_comb begin
    logic found_i, found_t;
    found_i = 1'b0; found_t = 1'b0;
    sched_idle = '0; sched_tgt = '0;
    for (int i = 0; i < NGPE; i++) begin
      if (!found_i && mode[i] == GPE_IDLE) begin
        found_i = 1'b1; sched_idle = TW'(i);
      end
      if (!found_t && mode[i] == GPE_AUTO && !fin[i] && !helped[i]
          && (len > ptr[i] + PW'(LOOKAHEAD))) begin
        found_t = 1'b1; sched_tgt = TW'(i);
      end
    end
    sched_ok = run && asst_on && found_i && found_t;
  end

  // contribution counts per list position
  logic [DEPTH-1:0][CW-1:0] ncc;
  logic [DEPTH-1:0][CW-1:0] ncc_inc;
  always_comb begin
    for (int j = 0; j < DEPTH; j++) begin
      ncc_inc[j] = '0;
      for (int i = 0; i < NGPE; i++)
        if (b_valid[i] && b_nc[i] && ptr[i] == PW'(j)) ncc_inc[j] = ncc_inc[j] + CW'(1);
    end
  end

  logic all_fin;
  assign all_fin = (&fin) && !(|a_busy) && !(|own_fly) && !(|asst_fly);

  assign clear    = start && !busy;
  assign busy     = (st != S_IDLE);
  assign nc_valid = (st == S_DRAIN);
  assign nc_id    = rd_id[0];
  assign nc_num   = ncc[dr_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      mode <= '{default: GPE_IDLE};
      ptr <= '0; own_fly <= '0; asst_fly <= '0; tgt <= '0; aidx <= '0; anext <= '0;
      helped <= '0; len <= '0; tx <= '0; ty <= '0; asst_on <= 1'b0; log_on <= 1'b0;
      ncc <= '0; dr_idx <= '0; done <= 1'b0;
      stat_hits <= '0; stat_assists <= '0; stat_cycles <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          st      <= S_RUN;
          len     <= list_len;
          tx      <= tile_x;
          ty      <= tile_y;
          asst_on <= assist_en;
          log_on  <= log_en;
          mode    <= '{default: GPE_AUTO};
          ptr     <= '0; own_fly <= '0; asst_fly <= '0; helped <= '0; anext <= '0;
          ncc     <= '0;
          stat_cycles <= '0;
        end
        S_RUN: begin
          stat_cycles <= stat_cycles + 32'd1;
          for (int i = 0; i < NGPE; i++) begin
            if (own_start[i]) own_fly[i] <= 1'b1;
            if (own_done[i])  own_fly[i] <= 1'b0;
            if (b_valid[i])   ptr[i] <= ptr[i] + PW'(1);
            if (mode[i] == GPE_AUTO && fin[i] && !own_fly[i]) mode[i] <= GPE_IDLE;
            if (asst_start[i]) begin
              asst_fly[i] <= 1'b1;
              aidx[i]     <= cand[i];
              anext[i]    <= cand[i] + PW'(1);
            end
            if (asst_done[i]) asst_fly[i] <= 1'b0;
            if (release_a[i]) begin
              mode[i]         <= GPE_IDLE;
              helped[tgt[i]]  <= 1'b0;
            end
          end
          if (|own_hit) stat_hits <= stat_hits + 32'($countones(own_hit));
          if (|wr_en) stat_assists <= stat_assists + 32'($countones(wr_en));
          for (int j = 0; j < DEPTH; j++) ncc[j] <= ncc[j] + ncc_inc[j];
          if (sched_ok) begin
            mode[sched_idle]   <= GPE_ASST;
            tgt[sched_idle]    <= sched_tgt;
            anext[sched_idle]  <= '0;
            helped[sched_tgt]  <= 1'b1;
          end
          if (all_fin) begin
            mode   <= '{default: GPE_IDLE};
            dr_idx <= '0;
            if (log_on && len != '0) st <= S_DRAIN;
            else begin
              st   <= S_IDLE;
              done <= 1'b1;
            end
          end
        end
        S_DRAIN: if (nc_ready) begin
          if (PW'(dr_idx) + PW'(1) >= len) begin
            st   <= S_IDLE;
            done <= 1'b1;
          end
          dr_idx <= dr_idx + AW'(1);
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
