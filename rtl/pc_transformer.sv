// pc_transformer: applies the rigid transformation T to the source cloud.
//
// After start, the module walks addresses 0 .. n_points-1 of the source
// buffer, one point per cycle, and writes each transformed point back to the
// same address:  p' = R * p + t.  The pipeline has three stages:
//   cycle 0  read request to the source buffer
//   cycle 1  the nine products R[i][j] * p_j are registered (Q16.16 x Q2.30)
//   cycle 2  each row is summed, rounded to nearest, shifted back to Q16.16,
//            the translation added and the result saturated to 32 bits; the
//            write-back happens at the end of this cycle.
// The last write-back and the done pulse coincide, n_points + 2 cycles after
// the cycle in which start was accepted.
// Reads run ahead of writes by three addresses, so no point is read after it
// has been overwritten. T must stay constant while busy. Transforming the
// cloud on the FPGA follows the source description; the arithmetic format,
// rounding and saturation are this design's choices.
module pc_transformer
  import fpps_pkg::*;
#(
  parameter int DEPTH = 4096
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [$clog2(DEPTH+1)-1:0] n_points,
  input  tmat_t                    tmat,
  output logic                     busy,
  output logic                     done,
  // source buffer read port (1-cycle latency)
  output logic                     rd_en,
  output logic [$clog2(DEPTH)-1:0] rd_addr,
  input  point_t                   rd_data,
  // source buffer write port
  output logic                     wr_en,
  output logic [$clog2(DEPTH)-1:0] wr_addr,
  output point_t                   wr_data
);
  localparam int AW   = $clog2(DEPTH);
  localparam int NW   = $clog2(DEPTH + 1);
  localparam int PW   = COORD_W + MAT_W;  // product width
  localparam int SW   = PW + 2;           // sum of three products

  typedef logic signed [PW-1:0] prod_t;
  typedef logic signed [SW-1:0] sum_t;

  logic [NW-1:0] issued;
  logic          s1_valid, s2_valid;
  logic [AW-1:0] s1_addr, s2_addr;
  prod_t [8:0]   s2_prod;

  // stage 0: address generation
  assign rd_en   = busy && (issued < n_points);
  assign rd_addr = AW'(issued);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      issued   <= '0;
      s1_valid <= 1'b0;
      s2_valid <= 1'b0;
      s1_addr  <= '0;
      s2_addr  <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy   <= 1'b1;
        issued <= '0;
      end else if (busy) begin
        if (rd_en) issued <= issued + 1'b1;
        if (!rd_en && !s1_valid) begin  // last write-back happens this cycle
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
      s1_valid <= rd_en;
      s1_addr  <= rd_addr;
      s2_valid <= s1_valid;
      s2_addr  <= s1_addr;
    end
  end

  // stage 1: products (rd_data valid while s1_valid)
  always_ff @(posedge clk) begin
    for (int i = 0; i < 3; i++) begin
      s2_prod[3*i+0] <= prod_t'(tmat[4*i+0]) * prod_t'(rd_data.x);
      s2_prod[3*i+1] <= prod_t'(tmat[4*i+1]) * prod_t'(rd_data.y);
      s2_prod[3*i+2] <= prod_t'(tmat[4*i+2]) * prod_t'(rd_data.z);
    end
  end

  // stage 2: sums, rounding, translation, saturation
  function automatic coord_t row_out(prod_t a, prod_t b, prod_t c, mat_t t);
    sum_t s;
    sum_t r;
    s = sum_t'(a) + sum_t'(b) + sum_t'(c) + (sum_t'(1) <<< (MAT_FRAC - 1));
    r = (s >>> MAT_FRAC) + sum_t'(t);
    if (r > sum_t'({1'b0, {(COORD_W-1){1'b1}}}))      return {1'b0, {(COORD_W-1){1'b1}}};
    else if (r < -sum_t'({1'b0, {(COORD_W-1){1'b1}}}) - 1) return {1'b1, {(COORD_W-1){1'b0}}};
    else                                               return coord_t'(r);
  endfunction

  assign wr_en     = s2_valid;
  assign wr_addr   = s2_addr;
  assign wr_data.x = row_out(s2_prod[0], s2_prod[1], s2_prod[2], tmat[3]);
  assign wr_data.y = row_out(s2_prod[3], s2_prod[4], s2_prod[5], tmat[7]);
  assign wr_data.z = row_out(s2_prod[6], s2_prod[7], s2_prod[8], tmat[11]);
endmodule
