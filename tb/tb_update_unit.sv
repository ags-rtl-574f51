// tb_update_unit: random (ID, number) records, many for the same few IDs, are
// fed to the update unit, which works against a DRAM model in this testbench
// with random request back-pressure and random, out-of-order read latencies.
// After each key-frame epoch the DRAM words of all touched IDs must hold
// {epoch, min(4095, sum of the epoch's numbers)}: words from the previous
// epoch must count as zero. Merges of records into busy entries must occur,
// and several read-modify-writes must be in flight at once.
module tb_update_unit;
  import ags_pkg::*;
  localparam int unsigned UNITS = 16, TAGW = 4, POOL = 40;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic [3:0] epoch = 4'd1;
  logic in_valid = 1'b0, in_ready;
  ncrec_t in_rec = '0;
  logic mem_req_valid, mem_req_ready = 1'b1, mem_req_we;
  gid_t mem_req_addr;
  logic [15:0] mem_req_wdata;
  logic [TAGW-1:0] mem_req_tag;
  logic mem_rsp_valid = 1'b0;
  logic [TAGW-1:0] mem_rsp_tag = '0;
  logic [15:0] mem_rsp_data = '0;
  logic idle;
  logic [31:0] stat_merges;

  update_unit #(.UNITS(UNITS)) dut (.*);

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // DRAM model: words, and pending reads with a due time
  logic [15:0] dram [POOL];
  typedef struct { int tag; int addr; int due; } rd_t;
  rd_t pend [$];
  int  now = 0, max_fly = 0;

  always @(posedge clk) begin
    now++;
    if (rst_n) begin
      // response (chosen at random among due reads), sampled at this edge
      mem_rsp_valid <= 1'b0;
      if (pend.size() > 0 && $urandom_range(0, 1) == 0) begin
        int k;
        k = $urandom_range(0, pend.size() - 1);
        if (pend[k].due <= now) begin
          mem_rsp_valid <= 1'b1;
          mem_rsp_tag   <= TAGW'(pend[k].tag);
          mem_rsp_data  <= dram[pend[k].addr];
          pend.delete(k);
        end
      end
      if (mem_req_valid && mem_req_ready) begin
        if (mem_req_we) dram[mem_req_addr] = mem_req_wdata;
        else pend.push_back('{tag: int'(mem_req_tag), addr: int'(mem_req_addr), due: now + $urandom_range(2, 30)});
      end
      if (pend.size() > max_fly) max_fly = pend.size();
      mem_req_ready <= ($urandom_range(0, 3) != 0);
    end
  end

  int sum [POOL];
  initial begin
    for (int i = 0; i < POOL; i++) dram[i] = 16'h0000;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int e = 0; e < 6; e++) begin
      epoch = 4'(e + 1);
      for (int i = 0; i < POOL; i++) sum[i] = 0;
      for (int r = 0; r < 600; r++) begin
        int id;
        id = ($urandom_range(0, 2) == 0) ? $urandom_range(0, 3) : $urandom_range(0, POOL - 1);
        in_valid = 1'b1;
        in_rec.id = gid_t'(id);
        in_rec.num = ncnum_t'((e == 5 && id < 2) ? 4000 : $urandom_range(1, 16));
        #1;
        while (!in_ready) begin @(negedge clk); #1; end
        sum[id] += int'(in_rec.num);
        @(negedge clk);
        in_valid = 1'b0;
        if ($urandom_range(0, 3) == 0) @(negedge clk);
      end
      while (!idle) @(negedge clk);
      repeat (2) @(negedge clk);
      for (int i = 0; i < POOL; i++) begin
        if (sum[i] == 0) continue;
        checks++;
        if (dram[i] !== {4'(e + 1), 12'((sum[i] > 4095) ? 4095 : sum[i])}) begin
          failures++;
          if (failures < 10) $display("epoch %0d id %0d: word %h expected count %0d", e + 1, i, dram[i], sum[i]);
        end
      end
    end
    checks++;
    if (stat_merges == 0 || max_fly < 4) begin failures++; $display("merges %0d, reads in flight %0d", stat_merges, max_fly); end
    $display("merges %0d, max reads in flight %0d", stat_merges, max_fly);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
