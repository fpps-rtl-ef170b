// fpps_pkg: types and constants shared by the point cloud processing kernel.
//
// Points are three signed fixed-point coordinates. The number format is this
// design's own choice (the source description does not give one): Q16.16, i.e.
// 32-bit two's complement with 16 fractional bits, which covers +-32 km at
// 15 um resolution. Distances are squared Euclidean distances, kept at full
// precision (68 bits) so that the nearest-neighbour search is exact.
// The rigid transformation T is a 3x4 matrix: the nine rotation entries are
// Q2.30, the three translation entries use the coordinate format.
package fpps_pkg;

  parameter int COORD_W    = 32;
  parameter int COORD_FRAC = 16;
  parameter int MAT_W      = 32;
  parameter int MAT_FRAC   = 30;
  parameter int DIST_W     = 2 * (COORD_W + 1) + 2;  // sum of three squared 33-bit differences
  parameter int IDX_W      = 20;                     // target point index, up to 1M points
  parameter int ACC_W      = 96;                     // accumulator width of the result package
  parameter int CNT_W      = 32;

  typedef logic signed [COORD_W-1:0] coord_t;
  typedef logic signed [MAT_W-1:0]   mat_t;
  typedef logic [DIST_W-1:0]         dist_t;
  typedef logic [IDX_W-1:0]          idx_t;
  typedef logic signed [ACC_W-1:0]   acc_t;

  typedef struct packed {
    coord_t x;
    coord_t y;
    coord_t z;
  } point_t;

  // Row-major 3x4 matrix: entry k is row k/4, column k%4; column 3 is translation.
  typedef mat_t [11:0] tmat_t;

  // Nearest-neighbour candidate held by a PE's MIN registers.
  typedef struct packed {
    logic   found;  // at least one target point was compared
    idx_t   idx;    // index of the candidate in the target cloud
    point_t q;      // the candidate point itself
    dist_t  d2;   // squared distance to the source point
  } nn_cand_t;

  // One correspondence: a source point and its nearest target point.
  typedef struct packed {
    point_t   p;
    nn_cand_t nn;
  } corr_t;

  // Result package returned to the host after a search.
  typedef struct packed {
    logic [CNT_W-1:0] count;     // accepted correspondences
    logic [CNT_W-1:0] rejected;  // correspondences beyond the maximum distance
    acc_t [2:0]       sum_p;     // sum of p (x, y, z) in Q16.16
    acc_t [2:0]       sum_q;     // sum of q
    acc_t [8:0]       sum_pq;    // sum of p_i * q_j, entry 3*i+j, in Q32.32
    acc_t             sum_d;     // sum of squared distances, Q32.32
  } acc_result_t;

  typedef enum logic [1:0] {
    OP_NONE      = 2'd0,
    OP_TRANSFORM = 2'd1,
    OP_SEARCH    = 2'd2
  } op_e;

  // Configuration register map of the kernel.
  parameter int CFG_TMAT0    = 0;   // 0..11: matrix entries
  parameter int CFG_NSRC     = 12;  // number of source points
  parameter int CFG_NTGT     = 13;  // number of target points
  parameter int CFG_MAXDIST  = 14;  // maximum correspondence distance, Q16.16

  parameter mat_t MAT_ONE = mat_t'(1) <<< MAT_FRAC;

  // Strict ordering used by the comparison tree: a found candidate beats a
  // missing one, a smaller distance wins, equal distances go to the lower index.
  function automatic logic cand_better(nn_cand_t a, nn_cand_t b);
    if (!a.found) return 1'b0;
    if (!b.found) return 1'b1;
    if (a.d2 != b.d2) return a.d2 < b.d2;
    return a.idx < b.idx;
  endfunction

endpackage
