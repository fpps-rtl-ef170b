// nn_searcher: exact nearest-neighbour search over the target cloud.
//
// For every source point p the module finds the target point q with the
// smallest squared distance and emits the pair (p, q) on a valid/ready stream.
// It is a task-level pipeline of four concurrent stages:
//  (1) data reading: source points are read from the source buffer into
//      src_point_regs until COLS of them (or the rest of the cloud) are held;
//  (2) distance computation: a ROWS x COLS array of nn_pe elements. Column c
//      holds source point c of the batch; each cycle the target buffer returns
//      ROWS points (one per bank), and target point r of that beat is
//      broadcast along PE row r. Every PE keeps the nearest candidate it has
//      seen. One batch streams the whole target cloud in ceil(n_tgt/ROWS) beats;
//  (3) distance comparison: after the last beat has passed the PEs, one
//      cmp_tree per column reduces its ROWS candidates to the winner;
//  (4) result accumulation: the COLS winners are serialised, in column order,
//      into a stream_fifo whose output feeds the result accumulator.
// While a batch streams, the next batch is being read into the fill set of
// the source registers, and the previous batch's results are drained.
//
// Control and timing (this design's own): start is accepted when idle. A batch
// takes 1 cycle to swap in the source registers, nbeats cycles of streaming,
// 3 cycles for the last beat to reach the MIN registers and 1 capture cycle,
// so the batch period is nbeats + 5 cycles when nothing stalls. Capture waits
// while the previous batch is still in the comparison trees or the serialiser
// (a result stall, possible only with few beats per batch); the swap waits
// while the next batch is still being read (a read stall). done pulses once
// every correspondence has left the FIFO. Both stall counts are reported.
// The array, the broadcast of a banked target cloud and the per-column
// comparison trees follow the source description; ROWS and COLS are not given
// there and default to 16 x 16.
module nn_searcher
  import fpps_pkg::*;
#(
  parameter int ROWS       = 16,
  parameter int COLS       = 16,
  parameter int TGT_DEPTH  = 131072,
  parameter int SRC_DEPTH  = 4096,
  parameter int FIFO_DEPTH = 16
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            start,
  input  logic [$clog2(SRC_DEPTH+1)-1:0]  n_src,
  input  logic [$clog2(TGT_DEPTH+1)-1:0]  n_tgt,
  output logic                            busy,
  output logic                            done,
  // source buffer read port (1-cycle latency)
  output logic                            src_rd_en,
  output logic [$clog2(SRC_DEPTH)-1:0]    src_rd_addr,
  input  point_t                          src_rd_data,
  // target buffer read port (1-cycle latency, one point per bank)
  output logic                            tgt_rd_en,
  output logic [$clog2(TGT_DEPTH/ROWS)-1:0] tgt_rd_addr,
  input  point_t [ROWS-1:0]               tgt_rd_data,
  // correspondence stream
  output logic                            out_valid,
  input  logic                            out_ready,
  output corr_t                           out_data,
  // statistics
  output logic [CNT_W-1:0]                stat_read_stall,
  output logic [CNT_W-1:0]                stat_result_stall
);
  localparam int SNW    = $clog2(SRC_DEPTH + 1);
  localparam int TNW    = $clog2(TGT_DEPTH + 1);
  localparam int BW     = $clog2(TGT_DEPTH / ROWS);
  localparam int RB     = $clog2(ROWS);
  localparam int CB     = $clog2(COLS);
  localparam int CW     = $clog2(COLS + 1);
  localparam int PE_LAT = 3;

  typedef enum logic [2:0] {S_IDLE, S_WAIT, S_STREAM, S_DRAIN, S_CAPT, S_FLUSH} state_e;
  state_e state;

  // sizes of this run
  logic [SNW-1:0] nbatches, batch_cnt;
  logic [TNW-1:0] nbeats;
  logic [BW-1:0]  beat;
  logic [1:0]     drain_cnt;

  always_comb begin
    nbatches = SNW'((n_src + SNW'(COLS - 1)) >> CB);
    nbeats   = TNW'((n_tgt + TNW'(ROWS - 1)) >> RB);
    if (nbeats == '0) nbeats = TNW'(1);   // an empty target cloud still needs one beat to clear MIN
  end

  // ---------------------------------------------------------------- stage 1
  logic [SNW-1:0] rd_ptr;
  logic [CW-1:0]  fill_issued;
  logic           rd_pending, rd_last;
  logic           regs_full, take;
  point_t [COLS-1:0] act_points;
  logic   [COLS-1:0] act_mask;

  assign src_rd_en   = (state != S_IDLE) && (rd_ptr < n_src) && (fill_issued < CW'(COLS)) && !regs_full;
  assign src_rd_addr = $clog2(SRC_DEPTH)'(rd_ptr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr      <= '0;
      fill_issued <= '0;
      rd_pending  <= 1'b0;
      rd_last     <= 1'b0;
    end else begin
      rd_pending <= src_rd_en;
      rd_last    <= src_rd_en && (rd_ptr == n_src - 1'b1);
      if (start && state == S_IDLE) begin
        rd_ptr      <= '0;
        fill_issued <= '0;
      end else begin
        if (src_rd_en) rd_ptr <= rd_ptr + 1'b1;
        if (take)           fill_issued <= '0;
        else if (src_rd_en) fill_issued <= fill_issued + 1'b1;
      end
    end
  end

  src_point_regs #(.COLS(COLS)) u_regs (
    .clk(clk), .rst_n(rst_n),
    .wr_valid(rd_pending), .wr_point(src_rd_data), .wr_last(rd_last),
    .full(regs_full), .take(take),
    .act_points(act_points), .act_mask(act_mask)
  );

  // ---------------------------------------------------------------- stage 2
  logic            meta_valid, meta_first;
  idx_t            meta_base;
  logic            capture;
  logic            res_idle;
  logic            fifo_empty;

  assign take        = (state == S_WAIT) && (batch_cnt != nbatches) && regs_full;
  assign tgt_rd_en   = (state == S_STREAM);
  assign tgt_rd_addr = beat;
  assign capture     = (state == S_CAPT) && res_idle;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state             <= S_IDLE;
      batch_cnt         <= '0;
      beat              <= '0;
      drain_cnt         <= '0;
      done              <= 1'b0;
      meta_valid        <= 1'b0;
      meta_first        <= 1'b0;
      meta_base         <= '0;
      stat_read_stall   <= '0;
      stat_result_stall <= '0;
    end else begin
      done       <= 1'b0;
      meta_valid <= tgt_rd_en;
      meta_first <= tgt_rd_en && (beat == '0);
      meta_base  <= idx_t'(beat) << RB;
      case (state)
        S_IDLE: if (start) begin
          state             <= S_WAIT;
          batch_cnt         <= '0;
          stat_read_stall   <= '0;
          stat_result_stall <= '0;
        end
        S_WAIT: begin
          if (batch_cnt == nbatches) state <= S_FLUSH;
          else if (take) begin
            state <= S_STREAM;
            beat  <= '0;
          end else stat_read_stall <= stat_read_stall + 1'b1;
        end
        S_STREAM: begin
          beat <= beat + 1'b1;
          if (TNW'(beat) == nbeats - 1'b1) begin
            state     <= S_DRAIN;
            drain_cnt <= '0;
          end
        end
        S_DRAIN: begin
          drain_cnt <= drain_cnt + 1'b1;
          if (drain_cnt == 2'(PE_LAT - 1)) state <= S_CAPT;
        end
        S_CAPT: begin
          if (capture) begin
            state     <= S_WAIT;
            batch_cnt <= batch_cnt + 1'b1;
          end else stat_result_stall <= stat_result_stall + 1'b1;
        end
        S_FLUSH: if (res_idle && fifo_empty) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  nn_cand_t [COLS-1:0][ROWS-1:0] pe_best;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    wire   row_valid = meta_valid && ((TNW'(meta_base) + TNW'(r)) < n_tgt);
    wire idx_t row_idx = meta_base + idx_t'(r);
    for (genvar c = 0; c < COLS; c++) begin : g_col
      nn_pe u_pe (
        .clk(clk), .rst_n(rst_n),
        .in_valid(row_valid), .in_first(meta_first),
        .q(tgt_rd_data[r]), .q_idx(row_idx), .p(act_points[c]),
        .best(pe_best[c][r])
      );
    end
  end

  // ---------------------------------------------------------------- stage 3
  logic     [COLS-1:0] tree_valid;
  nn_cand_t [COLS-1:0] tree_best;
  point_t   [COLS-1:0] cap_points;
  logic     [COLS-1:0] cap_mask;
  logic                tree_inflight;
  wire                 trees_valid = &tree_valid;  // all trees run in lockstep

  for (genvar c = 0; c < COLS; c++) begin : g_tree
    cmp_tree #(.N(ROWS)) u_tree (
      .clk(clk), .rst_n(rst_n),
      .in_valid(capture), .in_cand(pe_best[c]),
      .out_valid(tree_valid[c]), .out_best(tree_best[c])
    );
  end

  always_ff @(posedge clk) begin
    if (capture) begin
      cap_points <= act_points;
      cap_mask   <= act_mask;
    end
  end

  // ---------------------------------------------------------------- stage 4
  nn_cand_t [COLS-1:0] ser_cands;
  point_t   [COLS-1:0] ser_points;
  logic     [COLS-1:0] ser_mask;
  logic     [CB-1:0]   ser_sel;
  logic                fifo_in_ready;
  logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_count;

  always_comb begin
    ser_sel = '0;
    for (int c = COLS - 1; c >= 0; c--) if (ser_mask[c]) ser_sel = CB'(c);
  end

  wire ser_push = (ser_mask != '0) && fifo_in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ser_mask      <= '0;
      tree_inflight <= 1'b0;
    end else begin
      if (capture) tree_inflight <= 1'b1;
      else if (trees_valid) tree_inflight <= 1'b0;
      if (trees_valid) ser_mask <= cap_mask;
      else if (ser_push) ser_mask[ser_sel] <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (trees_valid) begin
      ser_cands  <= tree_best;
      ser_points <= cap_points;
    end
  end

  assign res_idle   = !tree_inflight && (ser_mask == '0);
  assign fifo_empty = (fifo_count == '0);

  stream_fifo #(.T(corr_t), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk(clk), .rst_n(rst_n),
    .in_valid(ser_mask != '0), .in_ready(fifo_in_ready),
    .in_data('{p: ser_points[ser_sel], nn: ser_cands[ser_sel]}),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data),
    .count(fifo_count)
  );

  assert property (@(posedge clk) disable iff (!rst_n) trees_valid |-> ser_mask == '0)
    else $error("nn_searcher: comparison tree result arrived while the serialiser was busy");
  initial begin
    assert (ROWS >= 2 && (1 << RB) == ROWS) else $fatal(1, "nn_searcher: ROWS must be a power of two >= 2");
    assert (COLS >= 2 && (1 << CB) == COLS) else $fatal(1, "nn_searcher: COLS must be a power of two >= 2");
  end
endmodule
