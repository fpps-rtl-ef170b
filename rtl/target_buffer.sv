// target_buffer: banked on-chip memory holding the target point cloud Q.
//
// The target cloud is partitioned into ROWS banks so that one batch of ROWS
// points can be read in a single cycle and broadcast, one point per PE row, to
// the distance-computation array. Point i lives in bank i mod ROWS at address
// i / ROWS (ROWS must be a power of two), so beat b of a scan returns points
// b*ROWS .. b*ROWS+ROWS-1 in bank order. The host writes one point per cycle
// through we/waddr/wdata; rdata is registered and valid one cycle after re.
// The banking follows the source description; the interleaving is this
// design's choice. DEPTH defaults to 131072, the roughly 130k candidates per
// source point the design is sized for.
module target_buffer
  import fpps_pkg::*;
#(
  parameter int ROWS  = 16,
  parameter int DEPTH = 131072
) (
  input  logic                            clk,
  input  logic                            we,
  input  idx_t                            waddr,
  input  point_t                          wdata,
  input  logic                            re,
  input  logic [$clog2(DEPTH/ROWS)-1:0]   raddr,
  output point_t [ROWS-1:0]               rdata
);
  localparam int BANK_DEPTH = DEPTH / ROWS;
  localparam int RB         = $clog2(ROWS);
  localparam int BA         = $clog2(BANK_DEPTH);

  initial begin
    assert (ROWS >= 2 && (1 << RB) == ROWS) else $fatal(1, "target_buffer: ROWS must be a power of two >= 2");
    assert (DEPTH % ROWS == 0 && DEPTH <= (1 << IDX_W)) else $fatal(1, "target_buffer: bad DEPTH");
  end

  wire [RB-1:0] wbank = waddr[RB-1:0];
  wire [BA-1:0] wrow  = BA'(waddr >> RB);

  for (genvar r = 0; r < ROWS; r++) begin : g_bank
    point_t mem [BANK_DEPTH];

    always_ff @(posedge clk) begin
      if (we && wbank == RB'(r)) mem[wrow] <= wdata;
    end

    always_ff @(posedge clk) begin
      if (re) rdata[r] <= mem[raddr];
    end
  end
endmodule
