// gauss_buffer: the Gaussian feature buffer of one GPE array.
//
// Holds, in depth order, the Gaussians of the tile the array is rendering:
// their IDs and 2D features. It is filled through one write port before the
// tile starts and read through NRD asynchronous read ports, one per GPE, so
// that every GPE, autonomous or assisting, can fetch any Gaussian of the list
// in the cycle it needs it. The depth is this design's choice: the mapping
// engine's 64 KB Gauss buffer divided among 16 GPE arrays leaves 4 KB each,
// i.e. 204 features of 20 bytes.
//
// Timing: a write is visible to the read ports from the next cycle.
module gauss_buffer
  import ags_pkg::*;
#(
  parameter int unsigned DEPTH = 204,
  parameter int unsigned NRD   = 16,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                   clk,
  input  logic                   we,
  input  logic [AW-1:0]          waddr,
  input  gid_t                   wid,
  input  gfeat_t                 wfeat,
  input  logic [NRD-1:0][AW-1:0] raddr,
  output gid_t   [NRD-1:0]       rid,
  output gfeat_t [NRD-1:0]       rfeat
);

  gid_t   ids   [DEPTH];
  gfeat_t feats [DEPTH];

  always_ff @(posedge clk) begin
    if (we) begin
      ids[waddr]   <= wid;
      feats[waddr] <= wfeat;
    end
  end

  always_comb begin
    for (int i = 0; i < NRD; i++) begin
      rid[i]   = ids[raddr[i]];
      rfeat[i] = feats[raddr[i]];
    end
  end

endmodule
