// nn_pe: one processing element of the nearest-neighbour array.
//
// Each PE sits at one row (a slice of the target cloud) and one column (one
// source point) of the array. Every cycle it may receive a broadcast target
// point q with its index; its Distance unit (nn_distance) computes the squared
// distance to the column's source point p, and the comparator ("<?") checks it
// against the MIN registers, which hold the smallest distance seen so far and
// the candidate that produced it. A strictly smaller distance replaces the
// stored candidate, so among equal distances the earlier target point stays.
//
// Timing: q, q_idx, in_valid and in_first are applied in cycle t; best shows
// the updated minimum from cycle t+3 on (two distance stages, one MIN stage).
// in_first marks the first beat of a new batch: the MIN registers are then
// loaded from that beat alone (or emptied, if that beat is not valid for this
// row), which starts a new search without a separate clear cycle. p must stay
// constant for the whole batch.
// The Distance / compare / MIN structure follows the source description; the
// first-beat restart and storing both the index and the coordinates of the
// candidate are this design's choices.
module nn_pe
  import fpps_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  logic     in_first,
  input  point_t   q,
  input  idx_t     q_idx,
  input  point_t   p,
  output nn_cand_t best
);
  dist_t  d2;
  logic   [1:0] v_d, f_d;
  idx_t   idx_d [2];
  point_t q_d   [2];

  nn_distance u_dist (.clk(clk), .p(p), .q(q), .d2(d2));

  // carry the candidate alongside the distance pipeline
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_d <= '0;
      f_d <= '0;
    end else begin
      v_d <= {v_d[0], in_valid};
      f_d <= {f_d[0], in_first};
    end
  end

  always_ff @(posedge clk) begin
    idx_d[0] <= q_idx;
    idx_d[1] <= idx_d[0];
    q_d[0]   <= q;
    q_d[1]   <= q_d[0];
  end

  // comparator and MIN registers
  wire smaller = !best.found || (d2 < best.d2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      best <= '{found: 1'b0, idx: '0, q: '0, d2: '1};
    end else if (f_d[1]) begin
      best <= v_d[1] ? '{found: 1'b1, idx: idx_d[1], q: q_d[1], d2: d2}
                     : '{found: 1'b0, idx: '0, q: '0, d2: '1};
    end else if (v_d[1] && smaller) begin
      best <= '{found: 1'b1, idx: idx_d[1], q: q_d[1], d2: d2};
    end
  end
endmodule
