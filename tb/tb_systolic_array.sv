// tb_systolic_array: random signed matrices A (N x K) and B (K x N) are fed one
// column / row per cycle (with random idle cycles); after drained the product
// read row by row must equal C = A*B computed in the testbench. The result must
// be complete 2N cycles after the last operand (drained high by then).
module tb_systolic_array;
  localparam int unsigned N = 8, DW = 16, AW = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic clear = 1'b0, in_valid = 1'b0;
  logic signed [N-1:0][DW-1:0] a_col = '0, b_row = '0;
  logic drained;
  logic [$clog2(N)-1:0] rd_row = '0;
  logic signed [N-1:0][AW-1:0] c_row;

  systolic_array #(.N(N), .DW(DW), .AW(AW)) dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint c_ref [N][N];
  initial begin
    int k, wait_cyc;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int m = 0; m < 20; m++) begin
      @(negedge clk);
      clear = 1'b1;
      @(negedge clk);
      clear = 1'b0;
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) c_ref[i][j] = 0;
      k = $urandom_range(1, 40);
      for (int kk = 0; kk < k; kk++) begin
        while ($urandom_range(0, 3) == 0) begin in_valid = 1'b0; @(negedge clk); end
        in_valid = 1'b1;
        for (int i = 0; i < N; i++) begin
          a_col[i] = DW'($urandom_range(0, 2000) - 1000);
          b_row[i] = DW'($urandom_range(0, 2000) - 1000);
        end
        for (int i = 0; i < N; i++)
          for (int j = 0; j < N; j++)
            c_ref[i][j] += longint'($signed(a_col[i])) * longint'($signed(b_row[j]));
        @(negedge clk);
      end
      in_valid = 1'b0;
      wait_cyc = 0;
      while (!drained) begin @(negedge clk); wait_cyc++; end
      checks++;
      if (wait_cyc > 2 * N) begin failures++; $display("drain took %0d cycles", wait_cyc); end
      for (int i = 0; i < N; i++) begin
        rd_row = $clog2(N)'(i);
        #1;
        for (int j = 0; j < N; j++) begin
          checks++;
          if (longint'($signed(c_row[j])) != c_ref[i][j]) begin
            failures++;
            if (failures < 5) $display("C[%0d][%0d] = %0d expected %0d", i, j, c_row[j], c_ref[i][j]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
