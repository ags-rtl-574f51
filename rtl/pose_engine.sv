// pose_engine: the pose tracking engine.
//
// Movement-adaptive tracking runs here. Every frame gets a coarse-grained pose
// estimate from a small neural network (feature extraction and ConvGRU update)
// whose matrix products run on NUM_SA N x N systolic arrays fed from the NN
// buffer. Only when the FC detection engine reports covisibility with the
// previous frame not above Thresh_T (refine = 1) is the lightweight GS array
// activated for Iter_T (20) fine-grained 3DGS iterations; otherwise it stays
// idle and the coarse pose stands.
//
// What is built: the systolic arrays, the banked NN buffer, the lightweight
// GS array with its Gauss buffer, and the sequencing of one frame:
//   run_start -> one GEMM pass on all systolic arrays (run_k operand pairs from
//   NN-buffer words run_a_base.. and run_b_base.. of each array's banks) ->
//   wait until the arrays have drained -> if run_refine: ITER_T rendering
//   passes of the lightweight GS array over the tiles loaded in it (arrays with
//   a non-zero list length) -> run_done pulse.
// Not built, because the published description does not give them: the
// network's layer sequence (its weights, shapes and GRU gating), the loss and
// pose-gradient computation and the pose update; a rendering pass therefore
// re-renders the loaded tiles rather than updated ones. The GEMM results are
// read back through rd_sa / rd_row.
module pose_engine
  import ags_pkg::*;
#(
  parameter int unsigned NUM_SA    = 2,
  parameter int unsigned N         = 32,
  parameter int unsigned NB_DEPTH  = 128,
  parameter int unsigned LIGHT_ARR = 8,
  parameter int unsigned DEPTH     = 204,
  parameter int unsigned ITER_T    = 20,
  parameter int unsigned NBA = $clog2(NB_DEPTH),
  parameter int unsigned AW  = $clog2(DEPTH),
  parameter int unsigned SSW = (NUM_SA > 1) ? $clog2(NUM_SA) : 1,
  parameter int unsigned LSW = (LIGHT_ARR > 1) ? $clog2(LIGHT_ARR) : 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // NN buffer fill
  input  logic                              nb_we,
  input  logic [$clog2(2*NUM_SA)-1:0]       nb_bank,
  input  logic [NBA-1:0]                    nb_addr,
  input  logic [N*16-1:0]                   nb_wdata,
  // lightweight GS array list loading and tiles
  input  logic                              ld_we,
  input  logic [LSW-1:0]                    ld_sel,
  input  logic [AW-1:0]                     ld_addr,
  input  gid_t                              ld_id,
  input  gfeat_t                            ld_feat,
  input  logic [LIGHT_ARR-1:0][AW:0]        list_len,
  input  logic [LIGHT_ARR-1:0][23:0]        tile_xy,
  input  logic [15:0]                       thresh_alpha,
  // frame command
  input  logic                              run_start,
  input  logic                              run_refine,
  input  logic [NBA:0]                      run_k,
  input  logic [NBA-1:0]                    run_a_base,
  input  logic [NBA-1:0]                    run_b_base,
  output logic                              run_busy,
  output logic                              run_done,
  // results
  input  logic [SSW-1:0]                    rd_sa,
  input  logic [$clog2(N)-1:0]              rd_row,
  output logic signed [N-1:0][31:0]         rd_data,
  output rgb_t [LIGHT_ARR-1:0][15:0]        pix_color,
  // statistics
  output logic [31:0]                       stat_frames,
  output logic [31:0]                       stat_refined,
  output logic [31:0]                       stat_iters
);

  localparam int unsigned NBANK = 2 * NUM_SA;

  // ---------------- NN buffer + systolic arrays ----------------
  logic [NBANK-1:0][NBA-1:0]   nb_raddr;
  logic [NBANK-1:0][N*16-1:0]  nb_rdata;

  nn_buffer #(.NBANK(NBANK), .DEPTH(NB_DEPTH), .WIDTH(N*16)) u_nnb (
    .clk, .we(nb_we), .wbank(nb_bank), .waddr(nb_addr), .wdata(nb_wdata),
    .raddr(nb_raddr), .rdata(nb_rdata)
  );

  logic                              sa_clear, sa_valid;
  logic [NUM_SA-1:0]                 sa_drained;
  logic signed [NUM_SA-1:0][N-1:0][31:0] sa_c;

  for (genvar s = 0; s < NUM_SA; s++) begin : g_sa
    systolic_array #(.N(N), .DW(16), .AW(32)) u_sa (
      .clk, .rst_n, .clear(sa_clear), .in_valid(sa_valid),
      .a_col(nb_rdata[2*s]), .b_row(nb_rdata[2*s+1]),
      .drained(sa_drained[s]), .rd_row, .c_row(sa_c[s])
    );
  end
  assign rd_data = sa_c[rd_sa];

  // ---------------- lightweight GS array ----------------
  logic [LIGHT_ARR-1:0] gs_start, gs_busy, gs_done;
  logic [LIGHT_ARR-1:0][15:0][15:0] pix_trans;
  logic                 nc_valid;
  gid_t                 nc_id;
  logic [4:0]           nc_num;
  logic [31:0]          gs_hits, gs_assists;

  gs_array #(.NARR(LIGHT_ARR), .DEPTH(DEPTH)) u_gs (
    .clk, .rst_n,
    .ld_we, .ld_sel, .ld_addr, .ld_id, .ld_feat,
    .start_mask(gs_start), .list_len, .tile_xy, .thresh_alpha,
    .assist_en(1'b1), .log_en(1'b0),
    .busy_mask(gs_busy), .done_mask(gs_done),
    .pix_color, .pix_trans,
    .nc_valid, .nc_ready(1'b1), .nc_id, .nc_num,
    .stat_hits(gs_hits), .stat_assists(gs_assists)
  );

  // ---------------- frame sequencer ----------------
  typedef enum logic [2:0] {P_IDLE, P_FEED, P_DRAIN, P_RSTART, P_RWAIT} st_e;
  st_e st;
  logic [NBA:0]          kcnt;
  logic [NBA-1:0]        a_ptr, b_ptr;
  logic [NBA:0]          klen;
  logic                  refine_q, rd_pend;
  logic [$clog2(ITER_T+1)-1:0] iter;
  logic [LIGHT_ARR-1:0]  active, pend;

  always_comb begin
    for (int s = 0; s < NUM_SA; s++) begin
      nb_raddr[2*s]   = a_ptr;
      nb_raddr[2*s+1] = b_ptr;
    end
    for (int k = 0; k < LIGHT_ARR; k++) active[k] = (list_len[k] != '0);
  end

  assign sa_valid = rd_pend;                    // buffer data arrives one cycle after the read
  assign sa_clear = (st == P_IDLE) && run_start;
  assign run_busy = (st != P_IDLE);
  assign gs_start = (st == P_RSTART) ? active : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= P_IDLE; kcnt <= '0; a_ptr <= '0; b_ptr <= '0; klen <= '0;
      refine_q <= 1'b0; rd_pend <= 1'b0; iter <= '0; pend <= '0; run_done <= 1'b0;
      stat_frames <= '0; stat_refined <= '0; stat_iters <= '0;
    end else begin
      run_done <= 1'b0;
      rd_pend  <= (st == P_FEED) && (kcnt < klen);
      case (st)
        P_IDLE: if (run_start) begin
          st       <= P_FEED;
          kcnt     <= '0;
          klen     <= run_k;
          a_ptr    <= run_a_base;
          b_ptr    <= run_b_base;
          refine_q <= run_refine;
        end
        P_FEED: begin
          if (kcnt < klen) begin
            kcnt  <= kcnt + 1'b1;
            a_ptr <= a_ptr + 1'b1;
            b_ptr <= b_ptr + 1'b1;
          end else st <= P_DRAIN;
        end
        P_DRAIN: if (&sa_drained && !rd_pend) begin
          stat_frames <= stat_frames + 32'd1;
          if (refine_q && active != '0) begin
            st           <= P_RSTART;
            iter         <= '0;
            stat_refined <= stat_refined + 32'd1;
          end else begin
            st       <= P_IDLE;
            run_done <= 1'b1;
          end
        end
        P_RSTART: begin
          pend <= active;
          st   <= P_RWAIT;
        end
        P_RWAIT: begin
          pend <= pend & ~gs_done;
          if ((pend & ~gs_done) == '0) begin
            stat_iters <= stat_iters + 32'd1;
            if (32'(iter) + 1 >= ITER_T) begin
              st       <= P_IDLE;
              run_done <= 1'b1;
            end else begin
              iter <= iter + 1'b1;
              st   <= P_RSTART;
            end
          end
        end
        default: st <= P_IDLE;
      endcase
    end
  end

endmodule
