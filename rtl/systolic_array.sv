// systolic_array: N x N output-stationary MAC array of the pose tracking
// engine (two 32x32 arrays in AGS-Edge), used for the matrix multiplications
// and convolutions of the coarse-grained pose estimation network.
//
// Each cycle with in_valid the array takes one column of A (a_col[i] = A[i][k])
// and one row of B (b_row[j] = B[k][j]). Row i of A enters the west edge
// delayed by i cycles and column j of B the north edge delayed by j cycles;
// operands then move one PE east / south per cycle and PE(i,j) accumulates
// A[i][k]*B[k][j]. After the last k the result C = A*B is complete in the PEs
// 2N cycles after the last operand (drained goes high) and is read row by row through rd_row.
// clear zeroes all accumulators. The dataflow and the 16-bit signed operands
// with 32-bit accumulators are this design's choices: the published
// description gives only the array size.
module systolic_array #(
  parameter int unsigned N  = 32,
  parameter int unsigned DW = 16,
  parameter int unsigned AW = 32
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               clear,
  input  logic                               in_valid,
  input  logic signed [N-1:0][DW-1:0]        a_col,
  input  logic signed [N-1:0][DW-1:0]        b_row,
  output logic                               drained,   // no operand in flight
  input  logic [$clog2(N)-1:0]               rd_row,
  output logic signed [N-1:0][AW-1:0]        c_row
);

  // skew registers: lane i delayed by i cycles
  logic signed [N-1:0][N-1:0][DW-1:0] a_sk, b_sk;
  logic        [N-1:0][N-1:0]         av_sk, bv_sk;

  // operands moving through the array
  logic signed [N-1:0][N-1:0][DW-1:0] a_pe, b_pe;
  logic        [N-1:0][N-1:0]         v_pe;
  logic signed [N-1:0][N-1:0][AW-1:0] acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      // row by row, to keep each constant small
      for (int i = 0; i < N; i++) begin
        a_sk[i] <= '0; b_sk[i] <= '0; av_sk[i] <= '0; bv_sk[i] <= '0;
        a_pe[i] <= '0; b_pe[i] <= '0; v_pe[i]  <= '0; acc[i]  <= '0;
      end
    end else begin
      // input skew: stage 0 takes the new data, stage s feeds from s-1
      for (int l = 0; l < N; l++) begin
        a_sk[l][0]  <= a_col[l];
        b_sk[l][0]  <= b_row[l];
        av_sk[l][0] <= in_valid;
        bv_sk[l][0] <= in_valid;
        for (int s = 1; s < N; s++) begin
          a_sk[l][s]  <= a_sk[l][s-1];
          b_sk[l][s]  <= b_sk[l][s-1];
          av_sk[l][s] <= av_sk[l][s-1];
          bv_sk[l][s] <= bv_sk[l][s-1];
        end
      end
      for (int i = 0; i < N; i++) begin
        for (int j = 0; j < N; j++) begin
          // west input of row i is skew stage i, north input of column j stage j
          a_pe[i][j] <= (j == 0) ? a_sk[i][i] : a_pe[i][j-1];
          b_pe[i][j] <= (i == 0) ? b_sk[j][j] : b_pe[i-1][j];
          v_pe[i][j] <= (j == 0) ? av_sk[i][i] : v_pe[i][j-1];
          if (clear)
            acc[i][j] <= '0;
          else if (v_pe[i][j])
            acc[i][j] <= acc[i][j] + AW'($signed(a_pe[i][j]) * $signed(b_pe[i][j]));
        end
      end
    end
  end

  assign drained = !(|av_sk) && !(|v_pe) && !in_valid;
  assign c_row   = acc[rd_row];

endmodule
