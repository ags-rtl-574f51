// comparison_unit: the comparators that turn non-contributory numbers into
// skip decisions for selective mapping.
//
// Each of the LANES entries (16 in AGS-Edge) holds an input register with one
// Gaussian's non-contributory number; its comparator clears the Gaussian's
// valid flag when the number is larger than the threshold. The threshold is
// the count threshold the algorithm calls Thresh_N (450 by default); the
// hardware description calls the same input Thresh_M. Strictly "larger than"
// follows the hardware description. The input registers make the decisions
// available one cycle after in_valid.
module comparison_unit
  import ags_pkg::*;
#(
  parameter int unsigned LANES = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  ncnum_t                   thresh,
  input  logic                     in_valid,
  input  logic [LANES-1:0]         in_mask,   // lanes holding a Gaussian
  input  ncnum_t [LANES-1:0]       in_num,
  output logic                     out_valid,
  output logic [LANES-1:0]         out_keep   // valid flag after comparison
);

  ncnum_t [LANES-1:0] ireg;
  logic   [LANES-1:0] mreg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ireg      <= '0;
      mreg      <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        ireg <= in_num;
        mreg <= in_mask;
      end
    end
  end

  always_comb begin
    for (int l = 0; l < LANES; l++)
      out_keep[l] = mreg[l] && !(ireg[l] > thresh);
  end

endmodule
