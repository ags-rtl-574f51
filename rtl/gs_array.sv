// gs_array: a GS array of NARR 4x4 GPE arrays rendering NARR tiles in parallel.
//
// The mapping engine's array has 16 GPE arrays (16 x (4x4) GPEs) and the pose
// tracking engine's lightweight array 8, in the AGS-Edge configuration; the
// server configuration doubles both. Each GPE array renders its own tile with
// its own slice of the Gauss buffer, GPE scheduler and alpha buffer.
//
// The arrays share one list-loading port (ld_sel picks the array) and one
// contribution-information output: the arrays' (Gaussian ID, count) streams
// are merged with a fixed-priority arbiter (lowest array first), which is this
// design's choice. start_mask starts any set of idle arrays with the common
// tile parameters tile_x/tile_y taken per array from tile_xy.
//
// Timing: an array's done_mask bit pulses for one cycle when its tile ends;
// pixel results of array k stay valid from then until it is started again.
module gs_array
  import ags_pkg::*;
#(
  parameter int unsigned NARR          = 16,
  parameter int unsigned DEPTH         = 204,
  parameter int unsigned ALPHA_ENTRIES = 16,
  parameter int unsigned AW            = $clog2(DEPTH),
  parameter int unsigned SW            = (NARR > 1) ? $clog2(NARR) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // list loading
  input  logic                         ld_we,
  input  logic [SW-1:0]                ld_sel,
  input  logic [AW-1:0]                ld_addr,
  input  gid_t                         ld_id,
  input  gfeat_t                       ld_feat,
  // control
  input  logic [NARR-1:0]              start_mask,
  input  logic [NARR-1:0][AW:0]        list_len,
  input  logic [NARR-1:0][23:0]        tile_xy,      // {x, y} top-left pixel
  input  logic [15:0]                  thresh_alpha,
  input  logic                         assist_en,
  input  logic                         log_en,
  output logic [NARR-1:0]              busy_mask,
  output logic [NARR-1:0]              done_mask,
  // results
  output rgb_t [NARR-1:0][15:0]        pix_color,
  output logic [NARR-1:0][15:0][15:0]  pix_trans,
  // merged contribution information
  output logic                         nc_valid,
  input  logic                         nc_ready,
  output gid_t                         nc_id,
  output logic [4:0]                   nc_num,
  // statistics summed over the arrays
  output logic [31:0]                  stat_hits,
  output logic [31:0]                  stat_assists
);

  logic [NARR-1:0]          a_nc_valid, a_nc_ready;
  gid_t [NARR-1:0]          a_nc_id;
  logic [NARR-1:0][4:0]     a_nc_num;
  logic [NARR-1:0][31:0]    a_hits, a_assists, a_cycles;

  for (genvar k = 0; k < NARR; k++) begin : g_arr
    gpe_array #(.DEPTH(DEPTH), .ALPHA_ENTRIES(ALPHA_ENTRIES), .AW(AW)) u_arr (
      .clk, .rst_n,
      .ld_we(ld_we && ld_sel == SW'(k)), .ld_addr, .ld_id, .ld_feat,
      .start(start_mask[k]), .list_len(list_len[k]),
      .tile_x(tile_xy[k][23:12]), .tile_y(tile_xy[k][11:0]),
      .thresh_alpha, .assist_en, .log_en,
      .busy(busy_mask[k]), .done(done_mask[k]),
      .pix_color(pix_color[k]), .pix_trans(pix_trans[k]),
      .nc_valid(a_nc_valid[k]), .nc_ready(a_nc_ready[k]),
      .nc_id(a_nc_id[k]), .nc_num(a_nc_num[k]),
      .stat_hits(a_hits[k]), .stat_assists(a_assists[k]), .stat_cycles(a_cycles[k])
    );
  end

  // fixed-priority merge of the contribution streams
  always_comb begin
    logic got;
    got        = 1'b0;
    nc_valid   = 1'b0;
    nc_id      = '0;
    nc_num     = '0;
    a_nc_ready = '0;
    for (int k = 0; k < NARR; k++) begin
      if (!got && a_nc_valid[k]) begin
        got           = 1'b1;
        nc_valid      = 1'b1;
        nc_id         = a_nc_id[k];
        nc_num        = a_nc_num[k];
        a_nc_ready[k] = nc_ready;
      end
    end
  end

  always_comb begin
    stat_hits    = '0;
    stat_assists = '0;
    for (int k = 0; k < NARR; k++) begin
      stat_hits    = stat_hits + a_hits[k];
      stat_assists = stat_assists + a_assists[k];
    end
  end

endmodule
