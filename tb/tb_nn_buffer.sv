// tb_nn_buffer: random words are written to every bank of a reduced buffer and
// read back through all bank ports at once; the data must match a testbench
// copy one cycle after the address (synchronous read).
module tb_nn_buffer;
  localparam int unsigned NBANK = 4, DEPTH = 32, WIDTH = 64;
  logic clk = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic we = 1'b0;
  logic [1:0] wbank = '0;
  logic [4:0] waddr = '0;
  logic [WIDTH-1:0] wdata = '0;
  logic [NBANK-1:0][4:0] raddr = '0;
  logic [NBANK-1:0][WIDTH-1:0] rdata;
  logic [WIDTH-1:0] model [NBANK][DEPTH];

  nn_buffer #(.NBANK(NBANK), .DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < NBANK; b++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        we = 1'b1; wbank = 2'(b); waddr = 5'(a); wdata = {$urandom, $urandom};
        model[b][a] = wdata;
      end
    @(negedge clk);
    we = 1'b0;
    for (int it = 0; it < 400; it++) begin
      logic [NBANK-1:0][4:0] ra;
      for (int b = 0; b < NBANK; b++) ra[b] = 5'($urandom);
      raddr = ra;
      // random overwrite in the same cycle as the reads
      we = ($urandom_range(0, 3) == 0); wbank = 2'($urandom); waddr = 5'($urandom);
      wdata = {$urandom, $urandom};
      @(negedge clk);
      for (int b = 0; b < NBANK; b++) begin
        checks++;
        if (rdata[b] !== model[b][ra[b]]) begin
          failures++;
          if (failures < 5) $display("bank %0d addr %0d: %h expected %h", b, ra[b], rdata[b], model[b][ra[b]]);
        end
      end
      if (we) model[wbank][waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
