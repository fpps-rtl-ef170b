// fpps_top: the point cloud processing kernel.
//
// One ICP iteration is split between host and kernel: the kernel finds, for
// every source point, its nearest target point and accumulates the statistics
// of those correspondences (OP_SEARCH); the host solves for the rigid
// transformation with an SVD and sends it back; the kernel then moves the
// source cloud by it (OP_TRANSFORM). The kernel contains
//   target_buffer       banked on-chip copy of the target cloud Q,
//   source_buffer       on-chip copy of the source cloud P, updated in place,
//   tmat_regs           the transformation T,
//   pc_transformer      P <- R*P + t, one point per cycle,
//   nn_searcher         the PE array that finds nearest neighbours,
//   result_accumulator  sums for the covariance matrix, with outlier rejection.
//
// Host interface (this design's own; the host-side memory path is not part of
// this RTL): the clouds are written point by point on tgt_we/src_we, and the
// configuration registers on cfg_we (addresses 0..11 the matrix entries,
// 12 source point count, 13 target point count, 14 maximum correspondence
// distance in Q16.16). Loads and configuration writes are allowed only while
// cmd_ready is high. A command is accepted when cmd_valid and cmd_ready are
// both high; done pulses for one cycle when it has finished, and result then
// holds the result package of the last search until the next search starts.
// OP_TRANSFORM takes n_src + 3 cycles; OP_SEARCH takes about
// ceil(n_src/COLS) * (ceil(n_tgt/ROWS) + 5) cycles plus a short fill and drain.
module fpps_top
  import fpps_pkg::*;
#(
  parameter int ROWS      = 16,
  parameter int COLS      = 16,
  parameter int TGT_DEPTH = 131072,
  parameter int SRC_DEPTH = 4096
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // cloud loading
  input  logic                           tgt_we,
  input  idx_t                           tgt_waddr,
  input  point_t                         tgt_wdata,
  input  logic                           src_we,
  input  logic [$clog2(SRC_DEPTH)-1:0]   src_waddr,
  input  point_t                         src_wdata,
  // configuration registers
  input  logic                           cfg_we,
  input  logic [3:0]                     cfg_addr,
  input  logic [31:0]                    cfg_data,
  // commands
  input  logic                           cmd_valid,
  input  op_e                            cmd_op,
  output logic                           cmd_ready,
  output logic                           done,
  // result package and statistics
  output acc_result_t                    result,
  output logic [CNT_W-1:0]               stat_read_stall,
  output logic [CNT_W-1:0]               stat_result_stall
);
  localparam int SAW = $clog2(SRC_DEPTH);
  localparam int SNW = $clog2(SRC_DEPTH + 1);
  localparam int TNW = $clog2(TGT_DEPTH + 1);

  typedef enum logic [1:0] {K_IDLE, K_XFORM, K_SEARCH, K_ACCDRAIN} kstate_e;
  kstate_e state;

  logic [SNW-1:0] n_src;
  logic [TNW-1:0] n_tgt;
  logic [31:0]    max_dist;
  dist_t          max_dist_sq;
  tmat_t          tmat;

  // ------------------------------------------------------------ registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_src    <= '0;
      n_tgt    <= '0;
      max_dist <= '1;
    end else if (cfg_we && cmd_ready) begin
      case (int'(cfg_addr))
        CFG_NSRC:    n_src    <= SNW'(cfg_data);
        CFG_NTGT:    n_tgt    <= TNW'(cfg_data);
        CFG_MAXDIST: max_dist <= cfg_data;
        default: ;
      endcase
    end
  end

  assign max_dist_sq = dist_t'(max_dist) * dist_t'(max_dist);

  tmat_regs u_tmat (
    .clk(clk), .rst_n(rst_n),
    .we(cfg_we && cmd_ready && int'(cfg_addr) < CFG_TMAT0 + 12),
    .addr(cfg_addr), .wdata(mat_t'(cfg_data)), .tmat(tmat)
  );

  // ------------------------------------------------------------ control
  logic xf_start, xf_busy, xf_done;
  logic nn_start, nn_busy, nn_done;
  logic acc_busy;

  assign cmd_ready = (state == K_IDLE);
  assign xf_start  = cmd_valid && cmd_ready && (cmd_op == OP_TRANSFORM);
  assign nn_start  = cmd_valid && cmd_ready && (cmd_op == OP_SEARCH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= K_IDLE;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        K_IDLE:     if (xf_start) state <= K_XFORM;
                    else if (nn_start) state <= K_SEARCH;
        K_XFORM:    if (xf_done) begin
                      state <= K_IDLE;
                      done  <= 1'b1;
                    end
        K_SEARCH:   if (nn_done) state <= K_ACCDRAIN;
        K_ACCDRAIN: if (!acc_busy) begin
                      state <= K_IDLE;
                      done  <= 1'b1;
                    end
        default:    state <= K_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------ buffers
  logic             sb_we, sb_re;
  logic [SAW-1:0]   sb_waddr, sb_raddr;
  point_t           sb_wdata, sb_rdata;
  logic             xf_rd_en, xf_wr_en, nn_src_rd_en;
  logic [SAW-1:0]   xf_rd_addr, xf_wr_addr, nn_src_rd_addr;
  point_t           xf_wr_data;

  always_comb begin
    if (state == K_XFORM) begin
      sb_we    = xf_wr_en;
      sb_waddr = xf_wr_addr;
      sb_wdata = xf_wr_data;
      sb_re    = xf_rd_en;
      sb_raddr = xf_rd_addr;
    end else begin
      sb_we    = src_we && cmd_ready;
      sb_waddr = src_waddr;
      sb_wdata = src_wdata;
      sb_re    = nn_src_rd_en;
      sb_raddr = nn_src_rd_addr;
    end
  end

  source_buffer #(.DEPTH(SRC_DEPTH)) u_src_buf (
    .clk(clk), .we(sb_we), .waddr(sb_waddr), .wdata(sb_wdata),
    .re(sb_re), .raddr(sb_raddr), .rdata(sb_rdata)
  );

  logic                            tb_re;
  logic [$clog2(TGT_DEPTH/ROWS)-1:0] tb_raddr;
  point_t [ROWS-1:0]               tb_rdata;

  target_buffer #(.ROWS(ROWS), .DEPTH(TGT_DEPTH)) u_tgt_buf (
    .clk(clk), .we(tgt_we && cmd_ready), .waddr(tgt_waddr), .wdata(tgt_wdata),
    .re(tb_re), .raddr(tb_raddr), .rdata(tb_rdata)
  );

  // ------------------------------------------------------------ engines
  pc_transformer #(.DEPTH(SRC_DEPTH)) u_xf (
    .clk(clk), .rst_n(rst_n), .start(xf_start), .n_points(n_src), .tmat(tmat),
    .busy(xf_busy), .done(xf_done),
    .rd_en(xf_rd_en), .rd_addr(xf_rd_addr), .rd_data(sb_rdata),
    .wr_en(xf_wr_en), .wr_addr(xf_wr_addr), .wr_data(xf_wr_data)
  );

  logic  corr_valid, corr_ready;
  corr_t corr;

  nn_searcher #(.ROWS(ROWS), .COLS(COLS), .TGT_DEPTH(TGT_DEPTH), .SRC_DEPTH(SRC_DEPTH)) u_nn (
    .clk(clk), .rst_n(rst_n), .start(nn_start), .n_src(n_src), .n_tgt(n_tgt),
    .busy(nn_busy), .done(nn_done),
    .src_rd_en(nn_src_rd_en), .src_rd_addr(nn_src_rd_addr), .src_rd_data(sb_rdata),
    .tgt_rd_en(tb_re), .tgt_rd_addr(tb_raddr), .tgt_rd_data(tb_rdata),
    .out_valid(corr_valid), .out_ready(corr_ready), .out_data(corr),
    .stat_read_stall(stat_read_stall), .stat_result_stall(stat_result_stall)
  );

  result_accumulator u_acc (
    .clk(clk), .rst_n(rst_n), .clear(nn_start), .max_dist_sq(max_dist_sq),
    .in_valid(corr_valid), .in_ready(corr_ready), .in_data(corr),
    .busy(acc_busy), .result(result)
  );

  assert property (@(posedge clk) disable iff (!rst_n) state == K_XFORM |-> !nn_busy)
    else $error("fpps_top: search engine active during a transform");
  assert property (@(posedge clk) disable iff (!rst_n) state == K_SEARCH |-> !xf_busy)
    else $error("fpps_top: transformer active during a search");
endmodule
