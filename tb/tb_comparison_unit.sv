// tb_comparison_unit: random numbers, masks and thresholds are pushed through
// the comparison unit; each lane's keep flag must equal mask && !(num > thresh)
// one cycle after the inputs (the unit's input registers), and numbers equal to
// the threshold must be kept (strictly "larger than" skips).
module tb_comparison_unit;
  import ags_pkg::*;
  localparam int unsigned LANES = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  ncnum_t thresh = '0;
  logic in_valid = 1'b0;
  logic [LANES-1:0] in_mask = '0;
  ncnum_t [LANES-1:0] in_num = '0;
  logic out_valid;
  logic [LANES-1:0] out_keep;

  comparison_unit #(.LANES(LANES)) dut (.*);

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [LANES-1:0] exp_keep;
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 500; it++) begin
      @(negedge clk);
      thresh   = ncnum_t'($urandom_range(0, 40));
      in_valid = 1'b1;
      in_mask  = LANES'($urandom);
      for (int l = 0; l < LANES; l++)
        in_num[l] = (l == 0) ? thresh : ncnum_t'($urandom_range(0, 80));
      for (int l = 0; l < LANES; l++) exp_keep[l] = in_mask[l] && !(in_num[l] > thresh);
      @(negedge clk);
      in_valid = 1'b0;
      checks++;
      if (!out_valid || out_keep !== exp_keep) begin
        failures++;
        if (failures < 5) $display("mismatch: keep %h expected %h", out_keep, exp_keep);
      end
      // equal to the threshold: kept
      checks++;
      if (out_keep[0] !== in_mask[0]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
