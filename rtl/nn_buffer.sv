// nn_buffer: on-chip buffer of the pose tracking engine (32 KB in AGS-Edge)
// holding the operands of the neural-network layers run on the systolic
// arrays.
//
// It is organised as NBANK banks of DEPTH words of WIDTH bits with a
// synchronous read (data one cycle after the address) per bank, so that each
// systolic array can fetch one A column and one B row every cycle: banks 2s and
// 2s+1 hold the A and B operands of array s. The host fills it through one
// write port. The banking is this design's choice; the published description
// gives only the capacity. Default: 4 banks x 128 words x 512 bits = 32 KB.
module nn_buffer #(
  parameter int unsigned NBANK = 4,
  parameter int unsigned DEPTH = 128,
  parameter int unsigned WIDTH = 512,
  parameter int unsigned AW    = $clog2(DEPTH),
  parameter int unsigned BW    = (NBANK > 1) ? $clog2(NBANK) : 1
) (
  input  logic                         clk,
  input  logic                         we,
  input  logic [BW-1:0]                wbank,
  input  logic [AW-1:0]                waddr,
  input  logic [WIDTH-1:0]             wdata,
  input  logic [NBANK-1:0][AW-1:0]     raddr,
  output logic [NBANK-1:0][WIDTH-1:0]  rdata
);

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    logic [WIDTH-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we && wbank == BW'(b)) mem[waddr] <= wdata;
      rdata[b] <= mem[raddr[b]];
    end
  end

endmodule
