// tb_fc_detect: frames of random minimum SADs (random beat masks, random
// lengths) are streamed as the two passes per frame. The reference sums the
// SADs in the testbench and computes covisibility = 1 - sum/(MBs*64*255) in
// real arithmetic; refine must be set exactly when covisibility with the
// previous frame is not above Thresh_T (90 %) and key_frame when covisibility
// with the key frame is not above Thresh_M (50 %). The decision must come two
// cycles after the last beat of the second pass.
module tb_fc_detect;
  import ags_pkg::*;
  localparam int unsigned LANES = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic [6:0] thresh_t_pct = 7'd90, thresh_m_pct = 7'd50;
  logic sad_valid = 1'b0, sad_last = 1'b0, sad_ref_key = 1'b0;
  logic [LANES-1:0][13:0] sad_data = '0;
  logic [LANES-1:0] sad_mask = '0;
  logic dec_valid;
  fc_dec_t dec;
  logic [31:0] sum_prev, sum_key;

  fc_detect #(.LANES(LANES)) dut (.*);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_refine = 0, n_key = 0;

  // one pass; level selects the SAD range (0..3 from similar to different)
  task automatic send_pass(input bit key, input int level, output longint sum, output int mbs);
    int beats;
    sum = 0; mbs = 0;
    beats = $urandom_range(3, 40);
    for (int b = 0; b < beats; b++) begin
      @(negedge clk);
      sad_valid   = 1'b1;
      sad_ref_key = key;
      sad_last    = (b == beats - 1);
      sad_mask    = LANES'($urandom);
      if (b == 0) sad_mask[0] = 1'b1;
      for (int l = 0; l < LANES; l++) begin
        sad_data[l] = 14'($urandom_range(0, 16320 * (level + 1) / 6));
        if (sad_mask[l]) begin sum += sad_data[l]; mbs++; end
      end
    end
    @(negedge clk);
    sad_valid = 1'b0; sad_last = 1'b0;
  endtask

  initial begin
    longint sp, sk;
    int mp, mk, lat;
    real cov_p, cov_k;
    bit exp_ref, exp_key;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < 200; f++) begin
      thresh_t_pct = (f % 3 == 0) ? 7'($urandom_range(30, 95)) : 7'd90;
      thresh_m_pct = (f % 3 == 0) ? 7'($urandom_range(20, 80)) : 7'd50;
      send_pass(1'b0, $urandom_range(0, 2), sp, mp);
      send_pass(1'b1, $urandom_range(0, 5), sk, mk);
      // the negedge after the last beat has passed; decision 2 cycles after the last beat
      lat = 1;
      while (!dec_valid && lat < 10) begin @(negedge clk); lat++; end
      cov_p = 1.0 - real'(sp) / (real'(mp) * 64.0 * 255.0);
      cov_k = 1.0 - real'(sk) / (real'(mk) * 64.0 * 255.0);
      exp_ref = !(cov_p * 100.0 > real'(thresh_t_pct));
      exp_key = !(cov_k * 100.0 > real'(thresh_m_pct));
      checks++;
      if (!dec_valid || lat != 2) begin
        failures++; $display("frame %0d: decision latency %0d", f, lat);
      end
      checks++;
      if (dec.refine !== exp_ref || dec.key_frame !== exp_key) begin
        failures++;
        $display("frame %0d: dec %b%b expected %b%b (cov %f %f)", f, dec.refine, dec.key_frame,
                 exp_ref, exp_key, cov_p, cov_k);
      end
      checks++;
      if (sum_prev != 32'(sp) || sum_key != 32'(sk)) failures++;
      n_refine += int'(exp_ref);
      n_key    += int'(exp_key);
    end
    checks++;
    if (n_refine == 0 || n_refine == 200 || n_key == 0 || n_key == 200) begin
      failures++; $display("decisions not exercised: refine %0d key %0d", n_refine, n_key);
    end
    $display("refine %0d key %0d of 200", n_refine, n_key);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
