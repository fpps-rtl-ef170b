// src_point_regs: local register buffer of source points for the PE columns.
//
// The data-reading stage copies source points from the source buffer into
// this buffer, one per cycle (wr_valid/wr_point). It has two register sets:
// a fill set that is being written and an active set that drives the COLS
// PE columns. The fill set is complete ("full") when COLS points have arrived
// or when a point marked wr_last (the end of the cloud) arrives, so the last
// batch may be partial. A one-cycle take pulse, legal only while full, copies
// the fill set to the active set together with a mask of occupied columns and
// empties the fill set, so filling the next batch overlaps the search of the
// current one. Writes while full are not allowed (asserted).
// Collecting source points in registers and handing them on when full follows
// the source description; the double set and the last-point flag are this
// design's choices.
module src_point_regs
  import fpps_pkg::*;
#(
  parameter int COLS = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    wr_valid,
  input  point_t                  wr_point,
  input  logic                    wr_last,
  output logic                    full,
  input  logic                    take,
  output point_t [COLS-1:0]       act_points,
  output logic   [COLS-1:0]       act_mask
);
  localparam int CW = $clog2(COLS + 1);

  point_t [COLS-1:0] fill_points;
  logic              fill_closed;
  logic [CW-1:0]     fill_count;

  assign full = fill_closed || (fill_count == CW'(COLS));

  always_ff @(posedge clk) begin
    if (wr_valid && !full) fill_points[fill_count[$clog2(COLS)-1:0]] <= wr_point;
    if (take) act_points <= fill_points;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill_count  <= '0;
      fill_closed <= 1'b0;
      act_mask    <= '0;
    end else if (take) begin
      for (int c = 0; c < COLS; c++) act_mask[c] <= (CW'(c) < fill_count);
      fill_count  <= '0;
      fill_closed <= 1'b0;
    end else if (wr_valid && !full) begin
      fill_count  <= fill_count + 1'b1;
      fill_closed <= wr_last;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(wr_valid && full))
    else $error("src_point_regs: write while full");
  assert property (@(posedge clk) disable iff (!rst_n) take |-> full)
    else $error("src_point_regs: take before the set is full");
endmodule
