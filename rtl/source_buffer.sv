// source_buffer: on-chip memory holding the source point cloud P.
//
// A simple dual-port RAM of DEPTH points (one write port, one read port) that
// maps onto block RAM. The read data appears one cycle after re/raddr
// (registered output, as block RAM has). The host loads it; the NN searcher
// reads it; the point cloud transformer reads it and writes the transformed
// points back in place. Writing and reading the same address in one cycle
// returns the old contents. Depth 4096 is the number of source points the
// evaluation samples per frame; ports and latency are this design's choice.
module source_buffer
  import fpps_pkg::*;
#(
  parameter int DEPTH = 4096
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  point_t                   wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output point_t                   rdata
);
  point_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end
endmodule
