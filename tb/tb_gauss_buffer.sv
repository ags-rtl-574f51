// tb_gauss_buffer: a list of random Gaussians is written and every read port
// reads random positions combinationally; IDs and features must match the
// testbench copy, and a write must be visible from the next cycle.
module tb_gauss_buffer;
  import ags_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned DEPTH = 204, NRD = 16, AW = 8;
  logic clk = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic we = 1'b0;
  logic [AW-1:0] waddr = '0;
  gid_t wid = '0;
  gfeat_t wfeat = '0;
  logic [NRD-1:0][AW-1:0] raddr = '0;
  gid_t   [NRD-1:0] rid;
  gfeat_t [NRD-1:0] rfeat;
  gid_t   mid [DEPTH];
  gfeat_t mf  [DEPTH];

  gauss_buffer #(.DEPTH(DEPTH), .NRD(NRD)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(a); wid = gid_t'($urandom); wfeat = rand_feat(0, 0, 4);
      mid[a] = wid; mf[a] = wfeat;
    end
    @(negedge clk);
    we = 1'b0;
    for (int it = 0; it < 300; it++) begin
      for (int g = 0; g < NRD; g++) raddr[g] = AW'($urandom_range(0, DEPTH - 1));
      #1;
      for (int g = 0; g < NRD; g++) begin
        checks++;
        if (rid[g] !== mid[raddr[g]] || rfeat[g] !== mf[raddr[g]]) failures++;
      end
      @(negedge clk);
      we = 1'b1; waddr = AW'($urandom_range(0, DEPTH - 1));
      wid = gid_t'($urandom); wfeat = rand_feat(1, 1, 4);
      raddr[0] = waddr;
      @(negedge clk);
      we = 1'b0;
      checks++;
      if (rid[0] !== wid || rfeat[0] !== wfeat) failures++;
      mid[waddr] = wid; mf[waddr] = wfeat;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
