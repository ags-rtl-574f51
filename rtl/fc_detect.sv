// fc_detect: frame covisibility (FC) detection engine.
//
// The video CODEC's motion estimation leaves one minimum SAD per 8x8 macro-block
// in DRAM. This engine reads them back, LANES per beat, sums them over the
// frame with an adder tree plus an accumulator (LANES adders in all, 8 in the
// published design) and turns the sum into two decisions with two comparators:
//   * refine    : covisibility with the previous frame is not above Thresh_T
//                 (90 %), so the pose tracking engine must run Iter_T
//                 fine-grained 3DGS iterations after the coarse estimate;
//   * key_frame : covisibility with the latest key frame is not above Thresh_M
//                 (50 %), so the mapping engine runs full mapping and logs
//                 contribution information; otherwise selective mapping.
// A larger SAD sum means less covisibility. The published description does
// not say how the sum becomes a percentage; this design defines
//   covisibility = 1 - sum / (MBs * MB_PIX * 255)
// and compares without division:
//   covisibility > P %  <=>  100 * sum < (100 - P) * MBs * MB_PIX * 255.
//
// Interface: each frame is sent as two passes on the SAD stream, first the SADs
// against the previous frame (sad_ref_key = 0), then the SADs against the latest
// key frame (sad_ref_key = 1); sad_last marks the final beat of a pass and
// sad_mask the valid lanes of a beat. The stream is always accepted (one beat
// per cycle). dec_valid pulses for one cycle, two cycles after the last beat of
// the second pass, with the decision and both sums.
module fc_detect
  import ags_pkg::*;
#(
  parameter int unsigned LANES  = 8,    // adders: LANES-1 in the tree + 1 accumulator
  parameter int unsigned SAD_W  = 14,   // 8x8x255 = 16320 fits in 14 bits
  parameter int unsigned MB_PIX = 64,   // pixels per macro-block (8x8)
  parameter int unsigned SUM_W  = 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [6:0]            thresh_t_pct,   // Thresh_T in percent (90)
  input  logic [6:0]            thresh_m_pct,   // Thresh_M in percent (50)
  input  logic                  sad_valid,
  input  logic [LANES-1:0][SAD_W-1:0] sad_data,
  input  logic [LANES-1:0]      sad_mask,
  input  logic                  sad_last,
  input  logic                  sad_ref_key,
  output logic                  dec_valid,
  output fc_dec_t               dec,
  output logic [SUM_W-1:0]      sum_prev,       // SAD sum against previous frame
  output logic [SUM_W-1:0]      sum_key         // SAD sum against latest key frame
);

  localparam int unsigned CNT_W = $clog2(LANES + 1);

  // adder tree over the lanes of one beat (combinational)
  logic [SUM_W-1:0] beat_sum;
  logic [CNT_W-1:0] beat_cnt;
  always_comb begin
    beat_sum = '0;
    beat_cnt = '0;
    for (int i = 0; i < LANES; i++) begin
      if (sad_mask[i]) begin
        beat_sum = beat_sum + SUM_W'(sad_data[i]);
        beat_cnt = beat_cnt + CNT_W'(1);
      end
    end
  end

  // accumulator stage
  logic [SUM_W-1:0] acc;
  logic [SUM_W-1:0] mbs;
  logic             pass_done, pass_key;
  logic [SUM_W-1:0] acc_fin, mbs_fin;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      mbs       <= '0;
      pass_done <= 1'b0;
      pass_key  <= 1'b0;
      acc_fin   <= '0;
      mbs_fin   <= '0;
    end else begin
      pass_done <= 1'b0;
      if (sad_valid) begin
        if (sad_last) begin
          acc_fin   <= acc + beat_sum;
          mbs_fin   <= mbs + SUM_W'(beat_cnt);
          acc       <= '0;
          mbs       <= '0;
          pass_done <= 1'b1;
          pass_key  <= sad_ref_key;
        end else begin
          acc <= acc + beat_sum;
          mbs <= mbs + SUM_W'(beat_cnt);
        end
      end
    end
  end

  // comparator stage: one comparator per threshold
  localparam int unsigned W2 = SUM_W + 16;
  logic [W2-1:0] lhs, max_sad, rhs_t, rhs_m;
  always_comb begin
    lhs     = W2'(acc_fin) * W2'(100);
    max_sad = W2'(mbs_fin) * W2'(MB_PIX) * W2'(255);
    rhs_t   = W2'(7'd100 - thresh_t_pct) * max_sad;
    rhs_m   = W2'(7'd100 - thresh_m_pct) * max_sad;
  end

  logic refine_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      refine_q  <= 1'b0;
      dec_valid <= 1'b0;
      dec       <= '0;
      sum_prev  <= '0;
      sum_key   <= '0;
    end else begin
      dec_valid <= 1'b0;
      if (pass_done) begin
        if (!pass_key) begin
          // covisibility > Thresh_T -> coarse estimate is enough
          refine_q <= !(lhs < rhs_t);
          sum_prev <= acc_fin;
        end else begin
          dec_valid     <= 1'b1;
          dec.refine    <= refine_q;
          dec.key_frame <= !(lhs < rhs_m);
          sum_key       <= acc_fin;
        end
      end
    end
  end

endmodule
