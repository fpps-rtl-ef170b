// result_accumulator: correspondence statistics for the SVD step.
//
// Consumes the stream of (source point p, nearest target point q) pairs and
// accumulates everything the host needs to form the 3x3 cross-covariance
// matrix and the centroids for the SVD-based transformation estimate:
//   count, sum p, sum q, sum p*q^T (nine entries) and sum of squared distances.
// The host forms the centred covariance as  sum p*q^T - (sum p)(sum q)^T / count.
// Pairs with no candidate, or whose squared distance exceeds max_dist_sq (the
// square of the maximum correspondence distance), are rejected as outliers
// and only counted. Two pipeline stages: products and the accept decision
// are registered, then added to 96-bit accumulators; in_ready is always high
// (one pair per cycle), busy is high while a pair is in flight, and clear
// empties the accumulators. The source description says the accumulator
// computes the covariance matrix for the SVD; accumulating raw sums, the
// hardware outlier filter and the widths are this design's choices.
module result_accumulator
  import fpps_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  dist_t       max_dist_sq,
  input  logic        in_valid,
  output logic        in_ready,
  input  corr_t       in_data,
  output logic        busy,
  output acc_result_t result
);
  typedef logic signed [2*COORD_W-1:0] prod_t;

  logic        v1, acc1;
  point_t      p1, q1;
  dist_t       d1;
  prod_t [8:0] pq1;

  assign in_ready = 1'b1;
  assign busy     = v1;

  function automatic coord_t comp(point_t pt, int i);
    return (i == 0) ? pt.x : (i == 1) ? pt.y : pt.z;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= in_valid && !clear;
  end

  always_ff @(posedge clk) begin
    acc1 <= in_data.nn.found && (in_data.nn.d2 <= max_dist_sq);
    p1   <= in_data.p;
    q1   <= in_data.nn.q;
    d1   <= in_data.nn.d2;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++)
        pq1[3*i+j] <= prod_t'(comp(in_data.p, i)) * prod_t'(comp(in_data.nn.q, j));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      result <= '0;
    end else if (clear) begin
      result <= '0;
    end else if (v1) begin
      if (acc1) begin
        result.count <= result.count + 1'b1;
        for (int i = 0; i < 3; i++) begin
          result.sum_p[i] <= result.sum_p[i] + acc_t'(comp(p1, i));
          result.sum_q[i] <= result.sum_q[i] + acc_t'(comp(q1, i));
        end
        for (int k = 0; k < 9; k++) result.sum_pq[k] <= result.sum_pq[k] + acc_t'(pq1[k]);
        result.sum_d <= result.sum_d + acc_t'(d1);
      end else begin
        result.rejected <= result.rejected + 1'b1;
      end
    end
  end
endmodule
